// npe_divider: final division of fused attention, A = sum(exp(S')V) / sum(exp(S')).
//
// M lanes divide their signed numerators by one common unsigned denominator and
// return the quotient with FRAC fraction bits, truncated toward zero:
// quo = trunc(num * 2^FRAC / den). Each lane is a restoring divider producing one
// quotient bit per cycle on the magnitude of num, the sign applied at the end.
// A zero denominator gives zero. Quotients beyond 32 bits wrap.
// The same divider serves normalisation: there the denominator is the root mean
// square from npe_rms instead of the softmax sum.
// Timing: pulse start with num and den; done rises on the 32+FRAC+1-th clock edge
// after the one that samples start, for one cycle,
// with quo valid from then until the next start. busy is high in between.
// The division step follows the paper's fused attention; the paper does it in its
// floating-point NPE, this fixed-point sequential divider is this design's choice.
module npe_divider
  import accllm_pkg::*;
#(
  parameter int unsigned M    = M_DEF,
  parameter int unsigned FRAC = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic signed [ACC_W-1:0] num [M],
  input  logic [ACC_W-1:0]        den,
  output logic                    busy,
  output logic                    done,
  output logic signed [ACC_W-1:0] quo [M]
);

  localparam int unsigned N  = ACC_W + FRAC;   // dividend bits
  localparam int unsigned CW = $clog2(N + 1);

  logic [N-1:0]     dvd [M];   // dividend, shifted out MSB first
  logic [N-1:0]     q   [M];
  logic [ACC_W:0]   rem [M];
  logic [M-1:0]     neg;
  logic [ACC_W-1:0] den_q;
  logic [CW-1:0]    cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      cnt   <= '0;
      den_q <= '0;
      neg   <= '0;
      for (int m = 0; m < M; m++) begin
        dvd[m] <= '0; q[m] <= '0; rem[m] <= '0; quo[m] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        cnt   <= CW'(N);
        den_q <= den;
        for (int m = 0; m < M; m++) begin
          neg[m] <= num[m][ACC_W-1];
          dvd[m] <= N'(num[m][ACC_W-1] ? ACC_W'(-num[m]) : num[m]) << FRAC;
          q[m]   <= '0;
          rem[m] <= '0;
        end
      end else if (busy) begin
        if (cnt != 0) begin
          for (int m = 0; m < M; m++) begin
            logic [ACC_W:0] r;
            r = {rem[m][ACC_W-1:0], dvd[m][N-1]};
            dvd[m] <= dvd[m] << 1;
            if (r >= {1'b0, den_q}) begin
              rem[m] <= r - {1'b0, den_q};
              q[m]   <= {q[m][N-2:0], 1'b1};
            end else begin
              rem[m] <= r;
              q[m]   <= {q[m][N-2:0], 1'b0};
            end
          end
          cnt <= cnt - 1'b1;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          for (int m = 0; m < M; m++) begin
            if (den_q == 0)  quo[m] <= '0;
            else if (neg[m]) quo[m] <= -ACC_W'(q[m]);
            else             quo[m] <= ACC_W'(q[m]);
          end
        end
      end
    end
  end

endmodule
