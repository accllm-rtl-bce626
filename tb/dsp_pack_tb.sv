// dsp_pack_tb: checks both packed products of one DSP slice in all three precision
// modes against products computed directly, with random and extreme operands, and
// checks the one-cycle latency.
module dsp_pack_tb;
  import accllm_pkg::*;

  logic clk = 0, en;
  prec_e prec;
  logic [7:0] x_a, x_b, w_a, w_b;
  logic signed [15:0] p_a, p_b;
  int checks = 0, failures = 0;

  dsp_pack dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wval(prec_e p, logic [7:0] w);
    case (p)
      P8X8:    return int'(signed'(w));
      P8X4:    return int'(signed'(w[3:0]));
      default: return int'(signed'(w[1:0]));
    endcase
  endfunction

  task automatic one(prec_e p, logic [7:0] xa, logic [7:0] xb, logic [7:0] wa, logic [7:0] wb);
    int ea, eb;
    prec = p; x_a = xa; x_b = xb; w_a = wa; w_b = wb; en = 1;
    ea = int'(xa) * wval(p, wa);
    eb = ((p == P8X2) ? int'(xb) : int'(xa)) * wval(p, wb);
    @(posedge clk); #1;
    en = 0;
    checks++;
    if (p_a !== 16'(ea) || p_b !== 16'(eb)) begin
      failures++;
      $display("FAIL prec=%0d x=%0d,%0d w=%h,%h got %0d,%0d exp %0d,%0d",
               p, xa, xb, wa, wb, p_a, p_b, ea, eb);
    end
    // held while en = 0
    x_a = ~xa; @(posedge clk); #1;
    checks++;
    if (p_a !== 16'(ea)) begin failures++; $display("FAIL hold"); end
  endtask

  initial begin
    en = 0; prec = P8X8; x_a = 0; x_b = 0; w_a = 0; w_b = 0;
    @(posedge clk); #1;
    for (int p = 0; p < 3; p++) begin
      one(prec_e'(p), 8'd255, 8'd255, 8'h80, 8'h80);
      one(prec_e'(p), 8'd255, 8'd255, 8'hff, 8'hff);
      one(prec_e'(p), 8'd255, 8'd0,   8'h7f, 8'hfe);
      one(prec_e'(p), 8'd0,   8'd255, 8'h02, 8'h01);
      one(prec_e'(p), 8'd255, 8'd255, 8'h01, 8'h02);
      for (int n = 0; n < 400; n++)
        one(prec_e'(p), 8'($urandom), 8'($urandom), 8'($urandom), 8'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
