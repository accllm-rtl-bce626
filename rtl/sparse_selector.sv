// sparse_selector: 2:4 input selection in front of one PE block.
//
// A 2:4-pruned weight row keeps 2 of every 4 weights; the kept weights are stored
// compressed (R of them cover 2R input channels) together with a 2-bit index giving
// each one's position inside its group of 4. For compressed weight r (group r/2) a
// 4:1 multiplexer picks x_dense[4*(r/2) + idx[r]], so the block's R multipliers see
// exactly the inputs their weights belong to and pruned positions cost nothing.
// With en = 0 (dense weights) the first R inputs pass straight through.
// Purely combinational. One multiplexer per weight element follows the paper's
// sparse selector figure (Mux 1 .. Mux N driven by idx 1 .. idx N); the index
// encoding and the dense pass-through lanes are this design's choices.
module sparse_selector
  import accllm_pkg::*;
#(
  parameter int unsigned R = R_DEF
) (
  input  logic              en,
  input  logic [XW-1:0]     x_dense [2*R],
  input  logic [1:0]        idx     [R],
  output logic [XW-1:0]     x_sel   [R]
);

  always_comb begin
    for (int r = 0; r < R; r++) begin
      if (en) x_sel[r] = x_dense[4*(r/2) + int'(idx[r])];
      else    x_sel[r] = x_dense[r];
    end
  end

endmodule
