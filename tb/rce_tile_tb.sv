// rce_tile_tb: a reduced tile (R=8, M=4) runs jobs of random length in every
// precision, dense and 2:4-sparse (sparse with 2-bit weights). The testbench computes
// each block's dot product itself (selection by index, sign-extended weights,
// unsigned activations) and checks the accumulators, and that a result appears
// exactly two clock edges after its last input beat.
module rce_tile_tb;
  import accllm_pkg::*;
  localparam int R = 8, M = 4;
  logic clk = 0, rst_n, valid, first, sparse;
  prec_e prec;
  logic [7:0] x_dense [2*R];
  logic [7:0] w [M][R];
  logic [1:0] idx [M][R];
  logic signed [31:0] acc [M];
  int checks = 0, failures = 0;

  rce_tile #(.R(R), .M(M)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wval(prec_e p, logic [7:0] v);
    case (p)
      P8X8:    return int'(signed'(v));
      P8X4:    return int'(signed'(v[3:0]));
      default: return int'(signed'(v[1:0]));
    endcase
  endfunction

  initial begin
    longint model [M];
    rst_n = 0; valid = 0; first = 0; sparse = 0; prec = P8X8;
    for (int j = 0; j < 2*R; j++) x_dense[j] = 0;
    for (int m = 0; m < M; m++) for (int r = 0; r < R; r++) begin w[m][r] = 0; idx[m][r] = 0; end
    #12 rst_n = 1;
    for (int job = 0; job < 150; job++) begin
      int n;
      longint prev [M];
      n = 1 + $urandom % 6;
      prec = prec_e'($urandom % 3);
      sparse = (prec == P8X2) && $urandom % 2;
      for (int m = 0; m < M; m++) begin prev[m] = model[m]; model[m] = 0; end
      for (int b = 0; b < n; b++) begin
        @(negedge clk);
        valid = 1; first = (b == 0);
        for (int j = 0; j < 2*R; j++) x_dense[j] = 8'($urandom);
        for (int m = 0; m < M; m++)
          for (int r = 0; r < R; r++) begin
            int xs;
            w[m][r] = 8'($urandom);
            idx[m][r] = 2'($urandom);
            xs = sparse ? int'(x_dense[4*(r/2) + idx[m][r]]) : int'(x_dense[r]);
            model[m] += xs * wval(prec, w[m][r]);
          end
      end
      @(negedge clk);
      valid = 0; first = 0;
      // one edge after the last beat: the last beat is not yet in
      if (n == 1) begin
        for (int m = 0; m < M; m++) begin
          checks++;
          if (job > 0 && acc[m] !== 32'(prev[m])) begin
            failures++; $display("FAIL early update job=%0d", job);
          end
        end
      end
      @(negedge clk);
      for (int m = 0; m < M; m++) begin
        checks++;
        if (acc[m] !== 32'(model[m])) begin
          failures++;
          $display("FAIL job=%0d prec=%0d sparse=%0d m=%0d got %0d exp %0d",
                   job, prec, sparse, m, acc[m], model[m]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
