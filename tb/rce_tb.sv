// rce_tb: a reduced engine (R=8, M=4, T=4) runs random jobs in MM and VM mode. The
// reference follows the two dataflows: MM - tile t uses token t and the broadcast
// weights of lane group 0; VM - every tile uses token 0 and its own weights. All
// T x M accumulators are checked two edges after the last beat.
module rce_tb;
  import accllm_pkg::*;
  localparam int R = 8, M = 4, T = 4;
  logic clk = 0, rst_n, valid, first, sparse;
  mode_e mode;
  prec_e prec;
  logic [7:0] x_tok [T][2*R];
  logic [7:0] w [T][M][R];
  logic [1:0] idx [T][M][R];
  logic signed [31:0] acc [T][M];
  int checks = 0, failures = 0;
  int n_mm = 0, n_vm = 0;

  rce #(.R(R), .M(M), .T(T)) dut (.*);
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
    longint model [T][M];
    rst_n = 0; valid = 0; first = 0; sparse = 0; prec = P8X8; mode = MODE_MM;
    #12 rst_n = 1;
    for (int job = 0; job < 120; job++) begin
      int n;
      n = 1 + $urandom % 5;
      mode = mode_e'(job % 2);
      if (mode == MODE_MM) n_mm++; else n_vm++;
      prec = prec_e'($urandom % 3);
      sparse = (prec == P8X2) && $urandom % 2;
      for (int t = 0; t < T; t++) for (int m = 0; m < M; m++) model[t][m] = 0;
      for (int b = 0; b < n; b++) begin
        @(negedge clk);
        valid = 1; first = (b == 0);
        for (int t = 0; t < T; t++) begin
          for (int j = 0; j < 2*R; j++) x_tok[t][j] = 8'($urandom);
          for (int m = 0; m < M; m++) for (int r = 0; r < R; r++) begin
            w[t][m][r] = 8'($urandom); idx[t][m][r] = 2'($urandom);
          end
        end
        for (int t = 0; t < T; t++) for (int m = 0; m < M; m++) for (int r = 0; r < R; r++) begin
          int tt, wt, xs;
          tt = (mode == MODE_MM) ? t : 0;   // token feeding tile t
          wt = (mode == MODE_MM) ? 0 : t;   // weight lanes feeding tile t
          xs = sparse ? int'(x_tok[tt][4*(r/2) + idx[wt][m][r]]) : int'(x_tok[tt][r]);
          model[t][m] += xs * wval(prec, w[wt][m][r]);
        end
      end
      @(negedge clk); valid = 0; first = 0;
      @(negedge clk);
      for (int t = 0; t < T; t++) for (int m = 0; m < M; m++) begin
        checks++;
        if (acc[t][m] !== 32'(model[t][m])) begin
          failures++;
          $display("FAIL job=%0d mode=%0d prec=%0d sp=%0d t=%0d m=%0d got %0d exp %0d",
                   job, mode, prec, sparse, t, m, acc[t][m], model[t][m]);
        end
      end
    end
    checks++;
    if (n_mm == 0 || n_vm == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
