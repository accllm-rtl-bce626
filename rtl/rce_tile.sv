// rce_tile: one processing tile of the Reconfigurable Computing Engine.
//
// A tile holds M PE blocks of R multipliers. Each block has its own sparse selector,
// because 2:4-pruned weight rows of different output channels keep different input
// positions. The multipliers of blocks 2i and 2i+1 are packed pairwise into R DSP
// slices (dsp_pack): with dense 8-bit or 4-bit weights both blocks share the tile's
// broadcast input; with 2-bit pruned weights each block brings its own selected
// input. Block m's accumulator therefore holds sum_r x_sel[m][r] * w[m][r].
// Timing: products are registered in the DSP stage, accumulated one cycle later;
// acc reflects an input beat two clock edges after it was presented with valid.
// M must be even. Pairing adjacent blocks follows the paper's text; the two-stage
// pipeline is this design's choice.
module rce_tile
  import accllm_pkg::*;
#(
  parameter int unsigned R = R_DEF,
  parameter int unsigned M = M_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid,
  input  logic                    first,
  input  prec_e                   prec,
  input  logic                    sparse,
  input  logic [XW-1:0]           x_dense [2*R],
  input  logic [WW-1:0]           w       [M][R],
  input  logic [1:0]              idx     [M][R],
  output logic signed [ACC_W-1:0] acc     [M]
);

  logic [XW-1:0]        x_sel [M][R];
  logic signed [PW-1:0] prod  [M][R];
  logic                 valid_q, first_q;

  for (genvar m = 0; m < M; m++) begin : g_sel
    sparse_selector #(.R(R)) u_sel (
      .en(sparse), .x_dense(x_dense), .idx(idx[m]), .x_sel(x_sel[m])
    );
  end

  for (genvar i = 0; i < M/2; i++) begin : g_pair
    for (genvar r = 0; r < R; r++) begin : g_dsp
      dsp_pack u_dsp (
        .clk(clk), .en(valid), .prec(prec),
        .x_a(x_sel[2*i][r]), .x_b(x_sel[2*i+1][r]),
        .w_a(w[2*i][r]),     .w_b(w[2*i+1][r]),
        .p_a(prod[2*i][r]),  .p_b(prod[2*i+1][r])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= 1'b0;
      first_q <= 1'b0;
    end else begin
      valid_q <= valid;
      first_q <= first;
    end
  end

  // Packed DSPs share one activation between the two blocks unless both products
  // are 2-bit; 2:4-selected inputs differ per block, so sparse needs P8X2.
  a_sparse_p8x2: assert property (@(posedge clk) disable iff (!rst_n)
                                  valid && sparse |-> prec == P8X2)
    else $error("rce_tile: sparse selection requires 2-bit weights (P8X2)");

  for (genvar m = 0; m < M; m++) begin : g_blk
    pe_block #(.R(R)) u_blk (
      .clk(clk), .rst_n(rst_n), .valid(valid_q), .first(first_q),
      .prod(prod[m]), .acc(acc[m])
    );
  end

endmodule
