// npe_softmax_exp_tb: random score beats with random masks, shifts and reference
// levels. Each exp value is compared with 127*2^(-k/4) (computed in real arithmetic
// and rounded) shifted right by the whole octaves, and the running sum with the
// testbench's own sum, including clear.
module npe_softmax_exp_tb;
  import accllm_pkg::*;
  localparam int M = 16;
  logic clk = 0, rst_n, valid, clr;
  logic [4:0] shift;
  logic signed [15:0] bias;
  logic signed [31:0] score [M];
  logic [M-1:0] lane_ok;
  logic [7:0] e [M];
  logic [31:0] sum;
  longint model_sum;
  int checks = 0, failures = 0;

  npe_softmax_exp #(.M(M)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_e(logic signed [31:0] sc, int sh, int b, bit ok);
    longint s, y;
    int base;
    s = longint'(sc) >>> sh;
    y = longint'(b) - s;
    if (y < 0) y = 0;
    if (!ok || y >= 28) return 0;
    base = $rtoi(127.0 * $pow(2.0, -real'(y % 4) / 4.0) + 0.5);
    return base >> (y / 4);
  endfunction

  initial begin
    rst_n = 0; valid = 0; clr = 0; shift = 0; bias = 0; lane_ok = '0;
    for (int m = 0; m < M; m++) score[m] = '0;
    model_sum = 0;
    #12 rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      int exp_e [M];
      longint bs;
      @(negedge clk);
      valid = ($urandom % 5) != 0;
      clr   = ($urandom % 10) == 0;
      shift = 5'($urandom % 8);
      bias  = 16'($urandom % 64) - 16'sd8;
      lane_ok = M'($urandom);
      bs = 0;
      for (int m = 0; m < M; m++) begin
        score[m] = 32'(int'($urandom % 4096) - 1024);
        exp_e[m] = ref_e(score[m], shift, bias, lane_ok[m]);
        bs += exp_e[m];
      end
      @(posedge clk); #1;
      if (valid) begin
        model_sum = (clr ? 0 : model_sum) + bs;
        for (int m = 0; m < M; m++) begin
          checks++;
          if (e[m] !== 8'(exp_e[m])) begin
            failures++;
            $display("FAIL n=%0d m=%0d score=%0d sh=%0d bias=%0d got %0d exp %0d",
                     n, m, score[m], shift, bias, e[m], exp_e[m]);
          end
        end
      end else if (clr) model_sum = 0;
      checks++;
      if (sum !== 32'(model_sum)) begin
        failures++; $display("FAIL sum n=%0d got %0d exp %0d", n, sum, model_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
