// pe_block_tb: streams random product vectors with first/valid patterns and compares
// the accumulator with a running sum kept by the testbench, cycle by cycle.
module pe_block_tb;
  import accllm_pkg::*;
  localparam int R = 32;
  logic clk = 0, rst_n, valid, first;
  logic signed [15:0] prod [R];
  logic signed [31:0] acc;
  longint model;
  int checks = 0, failures = 0;

  pe_block #(.R(R)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; valid = 0; first = 0;
    for (int r = 0; r < R; r++) prod[r] = '0;
    model = 0;
    #12 rst_n = 1;
    @(negedge clk);
    checks++;
    if (acc !== 0) begin failures++; $display("FAIL reset"); end
    for (int n = 0; n < 2000; n++) begin
      longint s;
      valid = ($urandom % 4) != 0;
      first = ($urandom % 8) == 0;
      s = 0;
      for (int r = 0; r < R; r++) begin
        prod[r] = 16'($urandom);
        s += longint'(prod[r]);
      end
      @(posedge clk); #1;
      if (valid) model = first ? s : model + s;
      checks++;
      if (acc !== 32'(model)) begin
        failures++;
        $display("FAIL n=%0d got %0d exp %0d", n, acc, 32'(model));
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
