// pe_block: adder tree and accumulator (REG) of one PE block.
//
// The R multipliers of a block work along the input-channel dimension, so their R
// products belong to the same output and are summed by an adder tree. The sum is
// added to the block register every valid cycle, accumulating partial sums across
// cycles (output reuse); `first` loads the sum instead, starting a new output.
// Timing: acc is updated on the clock edge of the cycle in which valid is high.
// The structure follows the paper's PE block (multipliers, adder, REG with
// feedback); the accumulator width and the load-on-first start are choices of
// this design.
module pe_block
  import accllm_pkg::*;
#(
  parameter int unsigned R = R_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid,
  input  logic                    first,
  input  logic signed [PW-1:0]    prod [R],
  output logic signed [ACC_W-1:0] acc
);

  logic signed [ACC_W-1:0] sum;

  always_comb begin
    sum = '0;
    for (int r = 0; r < R; r++) sum += ACC_W'(prod[r]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (valid) acc <= first ? sum : acc + sum;
  end

endmodule
