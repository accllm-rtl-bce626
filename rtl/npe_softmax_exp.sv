// npe_softmax_exp: softmax front end of the Nonlinear Processing Engine.
//
// Fused attention computes exp(S') for a block of scores, feeds those values back to
// the RCE to be multiplied by V, and keeps the running sum of exp(S') for the final
// division, so the full score row never has to be stored. This unit handles M
// scores per beat:
//   s  = score >>> shift            (the 1/sqrt(d_k) scaling, as a power of two)
//   y  = max(bias - s, 0)           (distance below the reference level, in quarter
//                                    octaves; scores above the reference are clipped)
//   e  = LUT[y mod 4] >> (y / 4)    with LUT = {127, 107, 90, 76} = 127*2^(-k/4)
// i.e. e ~ 127 * 2^((s - bias)/4), a base-2 exponential (the base change folds into
// the host's choice of shift and bias). Lanes with lane_ok = 0 (keys the query does not
// attend to) give e = 0. e fits in 7 bits so it is a valid 8-bit activation for the
// S x V multiply. Each valid beat adds the M values of e to `sum`; clr restarts it.
// Timing: e and sum are registered, one clock edge after valid.
// The kernel-fusion stages (scale, exp, E buffer, sum) follow the paper; the paper's
// NPE works in floating point, this one in fixed point, which is this design's choice.
module npe_softmax_exp
  import accllm_pkg::*;
#(
  parameter int unsigned M = M_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid,
  input  logic                    clr,
  input  logic [4:0]              shift,
  input  logic signed [15:0]      bias,
  input  logic signed [ACC_W-1:0] score   [M],
  input  logic [M-1:0]            lane_ok,
  output logic [XW-1:0]           e       [M],
  output logic [ACC_W-1:0]        sum
);

  localparam logic [6:0] LUT [4] = '{7'd127, 7'd107, 7'd90, 7'd76};

  logic [XW-1:0]    e_c [M];
  logic [ACC_W-1:0] e_sum;

  always_comb begin
    e_sum = '0;
    for (int m = 0; m < M; m++) begin
      logic signed [ACC_W-1:0] s, y;
      s = score[m] >>> shift;
      y = ACC_W'(bias) - s;
      if (y < 0) y = '0;
      if (!lane_ok[m] || y >= 28) e_c[m] = '0;
      else                        e_c[m] = XW'(LUT[y[1:0]] >> y[4:2]);
      e_sum += ACC_W'(e_c[m]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum <= '0;
      for (int m = 0; m < M; m++) e[m] <= '0;
    end else if (valid) begin
      sum <= (clr ? '0 : sum) + e_sum;
      e   <= e_c;
    end else if (clr) begin
      sum <= '0;
    end
  end

endmodule
