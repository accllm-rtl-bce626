// sparse_selector_tb: random dense inputs and 2:4 indices; each selected lane must
// equal the input at its group's indexed position, and dense mode must pass through.
module sparse_selector_tb;
  import accllm_pkg::*;
  localparam int R = 32;
  logic en;
  logic [7:0] x_dense [2*R];
  logic [1:0] idx [R];
  logic [7:0] x_sel [R];
  int checks = 0, failures = 0;

  sparse_selector #(.R(R)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      for (int j = 0; j < 2*R; j++) x_dense[j] = 8'($urandom);
      for (int r = 0; r < R; r++) idx[r] = 2'($urandom);
      en = n[0];
      #1;
      for (int r = 0; r < R; r++) begin
        logic [7:0] e;
        e = en ? x_dense[(r/2)*4 + idx[r]] : x_dense[r];
        checks++;
        if (x_sel[r] !== e) begin
          failures++;
          $display("FAIL n=%0d r=%0d en=%0d got %h exp %h", n, r, en, x_sel[r], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
