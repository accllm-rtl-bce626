// controller_tb: runs the controller (R=4, M=2, T=2) against simple models of the
// buffers, the RCE and the NPE, and checks what it does for each command kind:
//   * LINEAR/VM/dense/STORE: the weight and input addresses of every beat, the dense
//     half select, the first flag, and the address and contents of every drained word;
//   * LINEAR/MM/sparse/ACCUM: token-strided output addresses and read-add-write;
//   * LINEAR/VM/REQUANT: bytes written into the input buffer (shift, saturation,
//     element placement);
//   * EXP: exp values placed as bytes in the input buffer, lane masking by the
//     visible-key count, sum clear on the first word;
//   * DIV: each output word replaced by the divider's result;
//   * SILU: each output word replaced by the SiLU unit's result, two cycles a word;
//   * NORM: every word passed once to the RMS unit (cleared on the first), then each
//     replaced by the divider's result after the RMS unit reports done.
// The RCE model returns 1000*group + 10*tile + block (+ a sign flip for REQUANT).
module controller_tb;
  import accllm_pkg::*;
  localparam int R = 4, M = 2, T = 2;
  localparam int OBW = M*32, XBW = 2*R*8;

  logic clk = 0, rst_n;
  logic cmd_valid, cmd_ready, busy, done;
  cmd_t cmd;
  logic [15:0] ib_raddr, wb_raddr, ob_raddr, ob_waddr, ibw_addr;
  logic rce_valid, rce_first, in_half, rce_sparse;
  mode_e rce_mode;
  prec_e rce_prec;
  logic signed [31:0] acc [T][M];
  logic [OBW-1:0] ob_rdata, ob_wdata;
  logic ob_we, ibw_we;
  logic [0:0] ibw_bank;
  logic [XBW-1:0] ibw_data;
  logic [2*R-1:0] ibw_be;
  logic exp_valid, exp_clr;
  logic [M-1:0] exp_lane_ok;
  logic [4:0] exp_shift;
  logic signed [15:0] exp_bias;
  logic [7:0] exp_e [M];
  logic [15:0] kv_n_valid;
  logic div_start, div_done;
  logic signed [31:0] div_quo [M];
  logic signed [31:0] silu_y [M];
  logic rms_valid, rms_clr, rms_go, rms_done, norm_div;

  controller #(.R(R), .M(M), .T(T)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- models ----
  // RMS model: sums the lanes it is given while rms_valid; done 4 cycles after go
  longint rms_acc;
  int     rms_beats = 0, rms_cnt = 0, rms_clrs = 0;
  always @(posedge clk) begin
    rms_done <= 1'b0;
    if (rms_valid) begin
      rms_beats++;
      if (rms_clr) rms_clrs++;
      for (int m = 0; m < M; m++)
        rms_acc = (rms_clr && m == 0 ? 0 : rms_acc) + longint'(signed'(ob_rdata[m*32 +: 32]));
    end
    if (rms_go) rms_cnt <= 4;
    else if (rms_cnt > 0) begin
      rms_cnt <= rms_cnt - 1;
      if (rms_cnt == 1) rms_done <= 1'b1;
    end
  end
  // SiLU model: combinational on the output-buffer read data, y = 3x + 1
  always_comb for (int m = 0; m < M; m++) silu_y[m] = 3 * signed'(ob_rdata[m*32 +: 32]) + 1;
  logic [OBW-1:0] obuf [256];
  logic [7:0]     ibuf [2][256*2*R];
  int             grp;          // groups started (first beats seen) - 1
  int             neg_acc;      // RCE model gives negative values too
  logic [15:0]    prev_ib, prev_wb;
  int             beats [$];    // recorded (wb<<16 | ib<<1 | half) per beat
  int             div_cnt;
  logic [OBW-1:0] div_num;

  always_comb
    for (int t = 0; t < T; t++) for (int m = 0; m < M; m++)
      acc[t][m] = (neg_acc != 0 && m == 1) ? -(1000*grp + 10*t + m) : 1000*grp + 10*t + m;

  always_ff @(posedge clk) begin
    ob_rdata <= obuf[ob_raddr[7:0]];
    if (ob_we) obuf[ob_waddr[7:0]] <= ob_wdata;
    if (ibw_we)
      for (int b = 0; b < 2*R; b++)
        if (ibw_be[b]) ibuf[ibw_bank][int'(ibw_addr)*2*R + b] <= ibw_data[b*8 +: 8];
    prev_ib <= ib_raddr;
    prev_wb <= wb_raddr;
    if (rce_valid) begin
      beats.push_back({prev_wb, prev_ib[14:0], in_half});
      if (rce_first) grp <= grp + 1;
    end
    // exp model: e = low 7 bits of the score
    if (exp_valid)
      for (int m = 0; m < M; m++) exp_e[m] <= exp_lane_ok[m] ? {1'b0, ob_rdata[m*32 +: 7]} : 8'd0;
    // divider model: 3 cycles, quotient = numerator / 2
    div_done <= 1'b0;
    if (div_start) begin div_cnt <= 3; div_num <= ob_rdata; end
    else if (div_cnt > 0) begin
      div_cnt <= div_cnt - 1;
      if (div_cnt == 1) begin
        div_done <= 1'b1;
        for (int m = 0; m < M; m++) div_quo[m] <= signed'(div_num[m*32 +: 32]) / 2;
      end
    end
  end

  task automatic run(cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    cmd_t c;
    rst_n = 0; cmd_valid = 0; cmd = '0; grp = -1; neg_acc = 0;
    kv_n_valid = 16'd5; div_cnt = 0;
    for (int m = 0; m < M; m++) begin exp_e[m] = 0; div_quo[m] = 0; end
    for (int a = 0; a < 256; a++) obuf[a] = '0;
    for (int a = 0; a < 256*2*R; a++) begin ibuf[0][a] = 8'hee; ibuf[1][a] = 8'hee; end
    #12 rst_n = 1;

    // ---- 1: LINEAR, VM, dense, STORE ----
    c = '0; c.op = OP_LINEAR; c.mode = MODE_VM; c.prec = P8X8; c.drain = DR_STORE;
    c.n_chunks = 3; c.n_groups = 2; c.wb_base = 5; c.ib_base = 2; c.ob_base = 10;
    run(c);
    chk(beats.size() == 6, "beat count");
    for (int g = 0; g < 2; g++) for (int k = 0; k < 3; k++) begin
      int b;
      b = beats.pop_front();
      chk(b[31:16] == 5 + g*3 + k, $sformatf("wb addr g%0d k%0d = %0d", g, k, b[31:16]));
      chk(b[15:1] == 2 + k/2, $sformatf("ib addr g%0d k%0d = %0d", g, k, b[15:1]));
      chk(b[0] == k[0], "half select");
    end
    for (int g = 0; g < 2; g++) for (int t = 0; t < T; t++) for (int m = 0; m < M; m++)
      chk(obuf[10 + g*T + t][m*32 +: 32] == 32'(1000*g + 10*t + m),
          $sformatf("store g%0d t%0d m%0d = %0d", g, t, m, obuf[10+g*T+t][m*32 +: 32]));

    // ---- 2: LINEAR, MM, sparse 2-bit, ACCUM ----
    for (int t = 0; t < T; t++) for (int g = 0; g < 3; g++)
      for (int m = 0; m < M; m++) obuf[40 + t*8 + g][m*32 +: 32] = 32'(7 + t + g + m);
    grp = -1; beats.delete();
    c = '0; c.op = OP_LINEAR; c.mode = MODE_MM; c.prec = P8X2; c.sparse = 1; c.drain = DR_ACCUM;
    c.n_chunks = 2; c.n_groups = 3; c.wb_base = 0; c.ib_base = 4; c.ob_base = 40; c.ob_stride = 8;
    run(c);
    chk(beats.size() == 6, "beat count mm");
    for (int g = 0; g < 3; g++) for (int k = 0; k < 2; k++) begin
      int b;
      b = beats.pop_front();
      chk(b[15:1] == 4 + k && b[0] == 0, "sparse ib addr");
    end
    for (int t = 0; t < T; t++) for (int g = 0; g < 3; g++) for (int m = 0; m < M; m++)
      chk(obuf[40 + t*8 + g][m*32 +: 32] == 32'(7 + t + g + m + 1000*g + 10*t + m),
          $sformatf("accum t%0d g%0d m%0d", t, g, m));

    // ---- 3: LINEAR, VM, REQUANT (layer fusion) ----
    grp = -1; neg_acc = 1; beats.delete();
    c = '0; c.op = OP_LINEAR; c.mode = MODE_VM; c.prec = P8X4; c.drain = DR_REQUANT;
    c.n_chunks = 1; c.n_groups = 2; c.el_base = 16; c.shift = 2;
    run(c);
    neg_acc = 0;
    for (int g = 0; g < 2; g++) for (int t = 0; t < T; t++) for (int m = 0; m < M; m++) begin
      int v, e;
      v = (m == 1) ? -(1000*g + 10*t + m) : 1000*g + 10*t + m;
      v = v >>> 2;
      e = v > 255 ? 255 : v < 0 ? 0 : v;
      chk(ibuf[0][16 + (g*T + t)*M + m] == 8'(e),
          $sformatf("requant g%0d t%0d m%0d got %0d exp %0d", g, t, m,
                    ibuf[0][16 + (g*T + t)*M + m], e));
    end
    chk(ibuf[0][15] == 8'hee && ibuf[0][16 + 2*T*M] == 8'hee, "requant byte enables");

    // ---- 4: EXP ----
    for (int w = 0; w < 3; w++) for (int m = 0; m < M; m++)
      obuf[100 + w][m*32 +: 32] = 32'(20 + 3*w + m);
    c = '0; c.op = OP_EXP; c.n_groups = 3; c.ob_base = 100; c.el_base = 8; c.sum_clr = 1;
    c.key_base = 0;
    run(c);
    for (int w = 0; w < 3; w++) for (int m = 0; m < M; m++) begin
      int e;
      e = (w*M + m < 5) ? 20 + 3*w + m : 0;   // keys 5.. are beyond kv_n_valid
      chk(ibuf[0][8 + w*M + m] == 8'(e), $sformatf("exp w%0d m%0d got %0d exp %0d", w, m,
                                                   ibuf[0][8 + w*M + m], e));
    end

    // ---- 5: DIV ----
    for (int w = 0; w < 2; w++) for (int m = 0; m < M; m++)
      obuf[120 + w][m*32 +: 32] = 32'(-100 * (w + 1) - m);
    c = '0; c.op = OP_DIV; c.n_groups = 2; c.ob_base = 120;
    run(c);
    for (int w = 0; w < 2; w++) for (int m = 0; m < M; m++) begin
      int q;
      q = (-100 * (w + 1) - m) / 2;
      chk(signed'(obuf[120 + w][m*32 +: 32]) == q,
          $sformatf("div w%0d m%0d got %0d exp %0d", w, m, signed'(obuf[120 + w][m*32 +: 32]), q));
    end

    // ---- 6: SILU, in place, two cycles per word ----
    for (int w = 0; w < 3; w++) for (int m = 0; m < M; m++)
      obuf[140 + w][m*32 +: 32] = 32'(7 * w - 5 * m - 4);
    c = '0; c.op = OP_SILU; c.n_groups = 3; c.ob_base = 140;
    busy_cnt = 0;
    run(c);
    chk(busy_cnt == 2 * 3, $sformatf("silu busy for %0d cycles", busy_cnt));
    for (int w = 0; w < 3; w++) for (int m = 0; m < M; m++) begin
      int q;
      q = 3 * (7 * w - 5 * m - 4) + 1;
      chk(signed'(obuf[140 + w][m*32 +: 32]) == q,
          $sformatf("silu w%0d m%0d got %0d exp %0d", w, m, signed'(obuf[140 + w][m*32 +: 32]), q));
    end
    chk(obuf[143] == '0 && obuf[139] == '0, "silu stays inside its words");

    // ---- 7: NORM: one pass into the RMS unit, then divide in place ----
    for (int w = 0; w < 3; w++) for (int m = 0; m < M; m++)
      obuf[150 + w][m*32 +: 32] = 32'(11 * w + m + 1);
    c = '0; c.op = OP_NORM; c.n_groups = 3; c.ob_base = 150; c.shift = 5'd2;
    run(c);
    chk(rms_beats == 3 && rms_clrs == 1, $sformatf("rms beats %0d clears %0d", rms_beats, rms_clrs));
    chk(rms_acc == (1+2) + (12+13) + (23+24), $sformatf("rms unit saw sum %0d", rms_acc));
    for (int w = 0; w < 3; w++) for (int m = 0; m < M; m++)
      chk(signed'(obuf[150 + w][m*32 +: 32]) == (11 * w + m + 1) / 2,
          $sformatf("norm w%0d m%0d got %0d", w, m, signed'(obuf[150 + w][m*32 +: 32])));

    chk(clr_seen == 1, "exp sum cleared exactly once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // exp_clr must come with the first exp beat of a sum_clr command only
  int clr_seen = 0;
  int busy_cnt = 0;
  always @(posedge clk) if (busy) busy_cnt++;
  always @(posedge clk) if (exp_clr) clr_seen++;
endmodule
