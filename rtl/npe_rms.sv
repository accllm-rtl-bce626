// npe_rms: root-mean-square unit of the Nonlinear Processing Engine (normalisation).
//
// A normalisation layer divides each element of a token's vector by the vector's
// root mean square. This unit produces that divisor; the NPE divider then does the
// element-wise division. It works in two phases:
//   accumulate  while valid, sumsq += sum over the M lanes of x^2 (clr restarts it,
//               clr and valid together load the first beat);
//   root        a go pulse takes ms = sumsq >> shift (the mean over n = 2^shift
//               elements) and computes rms = floor(sqrt(ms)) by the restoring
//               digit-by-digit method, one result bit per cycle (32 cycles for the
//               32-bit root of the 64-bit mean). rms is at least 1 so the following
//               division is defined.
// Interface timing: sumsq is updated one edge after valid. busy is high from the edge
// after go until done; done pulses on the 33rd edge after the one that samples go, with
// rms valid from then until the next go. Elements are signed 32-bit; |x| < 2^27 keeps
// sumsq from overflowing for vectors of up to 2^10 elements.
// The paper names "Layernorm" as an NPE function and says the NPE works in floating
// point; the fixed-point RMS form (no mean subtraction, as in LLaMA's RMSNorm) and the
// shift-and-subtract square root are this design's choices.
// The remainder of the square root stays below 2^34, so of the 66-bit trial
// difference only the sign (bit 65) and the low bits are used; bit 64 is left unread.
module npe_rms
  import accllm_pkg::*;
#(
  parameter int unsigned M = M_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    valid,
  input  logic signed [ACC_W-1:0] x [M],
  input  logic                    go,
  input  logic [4:0]              shift,
  output logic                    busy,
  output logic                    done,
  output logic [ACC_W-1:0]        rms
);

  logic [63:0] sumsq, beat_sq, rem_v, ms;
  logic [31:0] root;
  logic [5:0]  cnt;

  always_comb begin
    beat_sq = '0;
    for (int m = 0; m < M; m++) beat_sq += unsigned'(64'(x[m]) * 64'(x[m]));
  end

  // one step of the restoring square root: bring down the next two bits of ms
  logic [65:0] trial, rem_next;
  always_comb begin
    rem_next = {rem_v, ms[63:62]};
    trial    = {rem_next[65:0]} - {32'b0, root, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sumsq <= '0;
      rem_v <= '0;
      ms    <= '0;
      root  <= '0;
      cnt   <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
      rms   <= 32'd1;
    end else begin
      done <= 1'b0;
      if (valid) sumsq <= (clr ? 64'd0 : sumsq) + beat_sq;
      else if (clr) sumsq <= '0;
      if (go && !busy) begin
        ms    <= sumsq >> shift;
        rem_v <= '0;
        root  <= '0;
        cnt   <= 6'd32;
        busy  <= 1'b1;
      end else if (busy) begin
        if (cnt == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
          rms  <= (root == 0) ? 32'd1 : root;
        end else begin
          if (!trial[65]) begin
            rem_v <= trial[63:0];
            root  <= {root[30:0], 1'b1};
          end else begin
            rem_v <= rem_next[63:0];
            root  <= {root[30:0], 1'b0};
          end
          ms  <= {ms[61:0], 2'b00};
          cnt <= cnt - 1'b1;
        end
      end
    end
  end

endmodule
