// buffer_ram_tb: random writes with byte enables into a shadow copy, then reads
// back every word and checks the one-cycle read latency.
module buffer_ram_tb;
  localparam int W = 64, D = 64;
  logic clk = 0, we;
  logic [5:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W/8-1:0] wbe;
  logic [W-1:0] shadow [D];
  int checks = 0, failures = 0;

  buffer_ram #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; raddr = 0; waddr = 0; wdata = 0; wbe = 0;
    // fill every word fully
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a); wdata = {$urandom, $urandom}; wbe = '1;
      shadow[a] = wdata;
    end
    // partial writes
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      we = 1; waddr = 6'($urandom); wdata = {$urandom, $urandom}; wbe = 8'($urandom);
      for (int b = 0; b < 8; b++) if (wbe[b]) shadow[waddr][8*b +: 8] = wdata[8*b +: 8];
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < D; a++) begin
      raddr = 6'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== shadow[a]) begin
        failures++;
        $display("FAIL a=%0d got %h exp %h", a, rdata, shadow[a]);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
