// npe_rms_tb: self-checking test of the root-mean-square unit.
//
// Feeds vectors of 2^shift elements (M per beat) with random magnitudes from tiny to
// near the 2^27 limit, plus all-zero and constant vectors, then pulses go and checks
// rms = max(1, floor(sqrt(sum(x^2) >> shift))) against a model (a real square root
// corrected to the exact integer), the done latency (done seen at the 34th falling edge after go is set, i.e. raised by
// the 33rd rising edge after the one that samples go), and that busy
// covers the whole computation.
module npe_rms_tb;
  import accllm_pkg::*;

  localparam int M = 4;

  logic clk = 1'b0, rst_n, clr, valid, go, busy, done;
  logic signed [ACC_W-1:0] x [M];
  logic [4:0]  shift;
  logic [ACC_W-1:0] rms;
  int checks = 0, failures = 0;

  npe_rms #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint isqrt(longint unsigned v);
    longint unsigned r;
    r = longint'($floor($sqrt(real'(v))));
    while (r * r > v) r--;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  task automatic one_vector(int sh, int kind, int mag);
    longint unsigned ss, expv;
    int cyc;
    ss = 0;
    for (int b = 0; b < (1 << sh) / M; b++) begin
      @(negedge clk);
      valid = 1'b1;
      clr   = (b == 0);
      for (int m = 0; m < M; m++) begin
        case (kind)
          0: x[m] = 0;
          1: x[m] = mag;
          default: x[m] = $signed($urandom_range(0, 2 * mag)) - mag;
        endcase
        ss += longint'(x[m]) * longint'(x[m]);
      end
    end
    @(negedge clk);
    valid = 1'b0; clr = 1'b0;
    shift = 5'(sh);
    go = 1'b1;
    @(negedge clk);
    go = 1'b0;
    cyc = 1;
    while (!done) begin
      checks++;
      if (!busy) begin failures++; $display("FAIL busy low before done"); end
      @(negedge clk);
      cyc++;
    end
    expv = isqrt(ss >> sh);
    if (expv == 0) expv = 1;
    checks++;
    if (rms != 32'(expv)) begin
      failures++;
      $display("FAIL kind %0d sh %0d sumsq %0d rms %0d exp %0d", kind, sh, ss, rms, expv);
    end
    checks++;
    if (cyc != 34) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    rst_n = 0; clr = 0; valid = 0; go = 0; shift = '0;
    for (int m = 0; m < M; m++) x[m] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    one_vector(2, 0, 0);
    one_vector(4, 1, 1000);
    one_vector(3, 1, -77);
    one_vector(10, 1, (1 << 27) - 1);
    for (int n = 0; n < 150; n++) begin
      static int mags [5] = '{3, 200, 40000, 3000000, (1 << 27) - 1};
      one_vector(2 + int'($urandom % 9), 2, mags[n % 5]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
