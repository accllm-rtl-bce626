// rce: Reconfigurable Computing Engine, T tiles of M PE blocks of R multipliers.
//
// The engine is configured per operation:
//   MM mode (prefill, matrix x matrix; input-output-parallel dataflow):
//     tile t takes token t (x_tok[t]); the weights of tile 0's lanes (w[0], idx[0])
//     are broadcast to every tile; block m handles output channel m. Parallelism is
//     R (input) x M (output) x T (tokens).
//   VM mode (decode, vector x matrix; output-parallel dataflow):
//     token 0 (x_tok[0]) is broadcast to every tile; every block of every tile takes
//     its own weight row (w[t][m]), giving M*T output channels in parallel.
// In both modes each block accumulates over successive input chunks.
// Latency: acc reflects an input beat two clock edges after it (see rce_tile).
// The two modes and their parallelism follow the paper; the lane assignment of the
// broadcast operands is this design's choice.
module rce
  import accllm_pkg::*;
#(
  parameter int unsigned R = R_DEF,
  parameter int unsigned M = M_DEF,
  parameter int unsigned T = T_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid,
  input  logic                    first,
  input  mode_e                   mode,
  input  prec_e                   prec,
  input  logic                    sparse,
  input  logic [XW-1:0]           x_tok [T][2*R],
  input  logic [WW-1:0]           w     [T][M][R],
  input  logic [1:0]              idx   [T][M][R],
  output logic signed [ACC_W-1:0] acc   [T][M]
);

  for (genvar t = 0; t < T; t++) begin : g_tile
    logic [XW-1:0] x_t   [2*R];
    logic [WW-1:0] w_t   [M][R];
    logic [1:0]    idx_t [M][R];

    always_comb begin
      x_t   = (mode == MODE_MM) ? x_tok[t] : x_tok[0];
      w_t   = (mode == MODE_MM) ? w[0]     : w[t];
      idx_t = (mode == MODE_MM) ? idx[0]   : idx[t];
    end

    rce_tile #(.R(R), .M(M)) u_tile (
      .clk(clk), .rst_n(rst_n), .valid(valid), .first(first),
      .prec(prec), .sparse(sparse),
      .x_dense(x_t), .w(w_t), .idx(idx_t), .acc(acc[t])
    );
  end

endmodule
