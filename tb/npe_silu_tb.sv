// npe_silu_tb: self-checking test of the fixed-point SiLU unit.
//
// Drives M lanes with edge values (0, +-1, the segment boundaries 1, 2.375, 5 and
// their neighbours, the extremes) and random values, and checks each result two
// ways: bit-exactly against an integer model of the piecewise-linear sigmoid written
// here, and against the real SiLU, x / (1 + exp(-x)), within 0.025*|x| + 4 LSB.
module npe_silu_tb;
  import accllm_pkg::*;

  localparam int M    = 4;
  localparam int FRAC = 8;

  logic signed [ACC_W-1:0] x [M];
  logic signed [ACC_W-1:0] y [M];
  int checks = 0, failures = 0;
  logic clk = 0;

  npe_silu #(.M(M), .FRAC(FRAC)) dut (.x(x), .y(y));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint model(input longint v);
    longint a, s;
    a = (v < 0) ? -v : v;
    if (a < 256)       s = a / 4 + 128;
    else if (a < 608)  s = a / 8 + 160;
    else if (a < 1280) s = a / 32 + 216;
    else               s = 256;
    if (v < 0) s = 256 - s;
    return (v * s) >>> 8;
  endfunction

  task automatic check_lanes();
    #1;
    for (int m = 0; m < M; m++) begin
      longint exp_i;
      real xr, ref_r, err;
      exp_i = model(longint'(x[m]));
      checks++;
      if (longint'(y[m]) != exp_i) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d y=%0d model=%0d", x[m], y[m], exp_i);
      end
      xr    = real'(x[m]) / 256.0;
      ref_r = (xr < -700.0) ? 0.0 : xr / (1.0 + $exp(-xr));
      err   = real'(y[m]) / 256.0 - ref_r;
      if (err < 0) err = -err;
      checks++;
      if (err > 0.025 * ((xr < 0) ? -xr : xr) + 4.0 / 256.0) begin
        failures++;
        if (failures < 10) $display("FAIL accuracy x=%f y=%f silu=%f", xr, real'(y[m]) / 256.0, ref_r);
      end
    end
  endtask

  initial begin
    static int edges [] = '{0, 1, -1, 255, 256, 257, -255, -256, -257, 607, 608, 609, -607, -608,
                     -609, 1279, 1280, 1281, -1279, -1280, -1281, 100000, -100000,
                     2147483647, -2147483647, -2147483648};
    for (int i = 0; i < edges.size(); i += M) begin
      for (int m = 0; m < M; m++) x[m] = (i + m < edges.size()) ? edges[i + m] : 0;
      check_lanes();
    end
    for (int n = 0; n < 2000; n++) begin
      for (int m = 0; m < M; m++)
        x[m] = (n % 2 != 0) ? $signed($urandom_range(0, 4095)) - 2048 : $signed($urandom);
      check_lanes();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
