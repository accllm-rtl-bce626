// npe_divider_tb: random signed numerators and positive denominators (and a zero
// denominator); quotients must equal trunc(num*256/den), done must arrive exactly
// on the 32+8+1-th clock edge after the edge that samples start.
module npe_divider_tb;
  import accllm_pkg::*;
  localparam int M = 4;
  logic clk = 0, rst_n, start, busy, done;
  logic signed [31:0] num [M];
  logic [31:0] den;
  logic signed [31:0] quo [M];
  int checks = 0, failures = 0;

  npe_divider #(.M(M)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; den = 0;
    for (int m = 0; m < M; m++) num[m] = 0;
    #12 rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      longint expq [M];
      int cyc;
      @(negedge clk);
      den = (n == 5) ? 0 : 1 + ($urandom % ((n % 2) ? 5000 : 100000));
      for (int m = 0; m < M; m++) begin
        num[m] = 32'(int'($urandom % 2000000) - 1000000);
        if (den == 0) expq[m] = 0;
        else begin
          expq[m] = (longint'(num[m]) * 256) / longint'(den);  // truncates toward 0
        end
      end
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 42) begin failures++; $display("FAIL latency %0d", cyc); end
      for (int m = 0; m < M; m++) begin
        checks++;
        if (quo[m] !== 32'(expq[m])) begin
          failures++;
          $display("FAIL num=%0d den=%0d got %0d exp %0d", num[m], den, quo[m], expq[m]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
