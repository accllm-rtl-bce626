// dsp_pack: two precision-scalable multipliers sharing one DSP slice.
//
// A DSP48E2 slice computes P = (A + D) x B with 27-bit A and D, an 18-bit B and a
// 48-bit P. Two multipliers of adjacent PE blocks (block 2i and 2i+1 of a tile) are
// packed into one such slice:
//   * P8X8 / P8X4 (LoRA weights, Q x K, S x V): both blocks see the same activation X.
//     A = sign-extended W1, D = W2 << 18, B = X, so P = X*W1 + (X*W2 << 18).
//     X*W1 is P[17:0]; X*W2 is P[33:18] corrected by the sign of the lower field.
//   * P8X2 (2:4-pruned 2-bit weights): the sparse selector has given the two blocks
//     different activations X1, X2, so both are packed into B as well:
//     A = sign-extended W1, D = W2 << 22, B = X2 << 10 | X1, and
//     P = X1W1 + X2W1<<10 + X1W2<<22 + X2W2<<32. Only X1W1 = P[9:0] and
//     X2W2 = P[41:32] (+ sign of P[31:0]) are kept; the cross products are discarded.
// The operand layout (field positions and padding) follows the paper's DSP packing
// figure. Activations are unsigned (B is zero-padded there), weights two's complement
// (A and D are sign-extended). The sign-correction of the upper field and the output
// register (one cycle latency, enable `en`) are this design's choices. The multiply
// is written as plain arithmetic; B is modelled as an unsigned 18-bit operand.
module dsp_pack
  import accllm_pkg::*;
(
  input  logic                 clk,
  input  logic                 en,
  input  prec_e                prec,
  input  logic [XW-1:0]        x_a,   // X (P8X8/P8X4) or X1 (P8X2), unsigned
  input  logic [XW-1:0]        x_b,   // X2 (P8X2 only), unsigned
  input  logic [WW-1:0]        w_a,   // W1, low 8/4/2 bits used, signed
  input  logic [WW-1:0]        w_b,   // W2
  output logic signed [PW-1:0] p_a,   // X1*W1
  output logic signed [PW-1:0] p_b    // X2*W2
);

  logic signed [26:0] a_op, d_op;
  logic        [17:0] b_op;
  logic signed [47:0] ad, p;
  logic signed [PW-1:0] pa_c, pb_c;

  always_comb begin
    unique case (prec)
      P8X8: begin
        a_op = 27'(signed'(w_a));
        d_op = {1'(w_b[7]), w_b[7:0], 18'b0};
        b_op = {10'b0, x_a};
      end
      P8X4: begin
        a_op = 27'(signed'(w_a[3:0]));
        d_op = {{5{w_b[3]}}, w_b[3:0], 18'b0};
        b_op = {10'b0, x_a};
      end
      default: begin // P8X2
        a_op = 27'(signed'(w_a[1:0]));
        d_op = {{3{w_b[1]}}, w_b[1:0], 22'b0};
        b_op = {x_b, 2'b0, x_a};
      end
    endcase
    ad = 48'(a_op) + 48'(d_op);
    p  = ad * 48'(signed'({1'b0, b_op}));
    if (prec == P8X2) begin
      pa_c = PW'(signed'(p[9:0]));
      pb_c = PW'(signed'(p[41:32] + 10'(p[31])));
    end else begin
      pa_c = signed'(p[15:0]);
      pb_c = signed'(p[33:18] + 16'(p[17]));
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      p_a <= pa_c;
      p_b <= pb_c;
    end
  end

endmodule
