// npe_silu: SiLU activation of the Nonlinear Processing Engine.
//
// SiLU(x) = x * sigmoid(x), the activation of the LLaMA feed-forward block. M lanes
// work in parallel on signed fixed-point values with FRAC fractional bits (1.0 =
// 2^FRAC). The sigmoid is a piecewise-linear, shift-and-add approximation on |x|
// (slopes 1/4, 1/8, 1/32; sigmoid error below 0.02, SiLU error below 0.025*|x| plus rounding):
//   |x| <  1        s = |x|/4  + 0.5
//   |x| <  2.375    s = |x|/8  + 0.625
//   |x| <  5        s = |x|/32 + 0.84375
//   |x| >= 5        s = 1
// and s(-x) = 1 - s(x). Then y = (x * s) >>> FRAC, in the same format as x, where s
// has FRAC fractional bits too. Only shifts, adds and one multiply per lane are used.
// Timing: combinational; the controller registers the result into the Output buffer.
// The paper names SiLU as one of the NPE's functions and says the NPE works in
// floating point; the fixed-point piecewise-linear form is this design's choice.
module npe_silu
  import accllm_pkg::*;
#(
  parameter int unsigned M    = M_DEF,
  parameter int unsigned FRAC = 8
) (
  input  logic signed [ACC_W-1:0] x [M],
  output logic signed [ACC_W-1:0] y [M]
);

  localparam logic [ACC_W-1:0] ONE = ACC_W'(1) << FRAC;

  // sigmoid of |x| in FRAC fractional bits, 0.5 .. 1.0
  function automatic logic [ACC_W-1:0] sig_pos(input logic [ACC_W-1:0] a);
    if (a < ONE)                          return (a >> 2) + (ONE >> 1);
    else if (a < (ONE * 19) >> 3)         return (a >> 3) + ((ONE * 5) >> 3);
    else if (a < ONE * 5)                 return (a >> 5) + ((ONE * 27) >> 5);
    else                                  return ONE;
  endfunction

  always_comb begin
    for (int m = 0; m < M; m++) begin
      logic [ACC_W-1:0]             a, s;
      logic signed [2*ACC_W-1:0]    p;
      a    = x[m][ACC_W-1] ? ACC_W'(-x[m]) : ACC_W'(x[m]);
      s    = x[m][ACC_W-1] ? ONE - sig_pos(a) : sig_pos(a);
      p    = (2*ACC_W)'(x[m]) * signed'((2*ACC_W)'(s));
      y[m] = ACC_W'(p >>> FRAC);
    end
  end

endmodule
