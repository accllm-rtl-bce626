// accllm_top_driver: end-to-end test program for the accelerator, shared by the
// reduced-size and the full-size top-level testbenches (it holds no DUT; the
// testbench connects it to one).
//
// It plays the host and the off-chip memories: loads weights, K/V rows and
// activations through the load ports, issues commands and reads results back, and
// checks everything against its own integer model. The program:
//   1. decode-stage layer fusion: a 2:4-sparse 2-bit linear layer (VM mode) whose
//      output is requantised straight into the input buffer, followed by a dense
//      8-bit linear layer (VM mode) on that output; the second layer's weights are
//      loaded while the first layer runs;
//   2. prefill: a dense 4-bit matrix product over T tokens at once (MM mode), then
//      RMS normalisation of token 0's output vector;
//   3. fused attention for one query over two tiles of T*M keys: Q x K^T, exp and
//      running sum (keys beyond the visible count masked), exp x V accumulated in the
//      output buffer, and the final division;
//   4. SiLU of the layer-2 outputs, in place in the output buffer;
//   5. Lambda-attention slot mapping at a position past the cache size (eviction).
// Each mechanism is counted from the hardware's own signals; one that never occurs
// counts as a failure.
module accllm_top_driver
  import accllm_pkg::*;
#(
  parameter int unsigned R = 8,
  parameter int unsigned M = 4,
  parameter int unsigned T = 2,
  parameter int unsigned WB_DEPTH = 128,
  parameter int unsigned IB_DEPTH = 256,
  parameter int unsigned OB_DEPTH = 1024,
  parameter int unsigned WATCHDOG = 200000,
  localparam int unsigned WBW = R*WW + 2*R,
  localparam int unsigned XBW = 2*R*XW,
  localparam int unsigned OBW = M*ACC_W,
  localparam int unsigned SW  = $clog2(KV_SINK + KV_WIN)
) (
  output logic                        clk,
  output logic                        rst_n,
  output logic                        cmd_valid,
  input  logic                        cmd_ready,
  output cmd_t                        cmd,
  input  logic                        busy,
  input  logic                        done,
  output logic                        wb_we,
  output logic [$clog2(T*M)-1:0]      wb_bank,
  output logic [$clog2(WB_DEPTH)-1:0] wb_addr,
  output logic [WBW-1:0]              wb_wdata,
  output logic                        ib_we,
  output logic [$clog2(T)-1:0]        ib_bank,
  output logic [$clog2(IB_DEPTH)-1:0] ib_addr,
  output logic [XBW-1:0]              ib_wdata,
  output logic [$clog2(OB_DEPTH)-1:0] ob_raddr,
  input  logic [OBW-1:0]              ob_rdata,
  output logic [31:0]                 kv_pos,
  input  logic [SW-1:0]               kv_slot,
  input  logic                        kv_evict,
  input  logic [15:0]                 kv_n_valid,
  input  logic [ACC_W-1:0]            exp_sum,
  // observed inside the design, for the mechanism counts
  input  logic                        p_rce_valid,
  input  mode_e                       p_rce_mode,
  input  prec_e                       p_rce_prec,
  input  logic                        p_rce_sparse,
  input  logic                        p_exp_valid,
  input  logic [M-1:0]                p_exp_lane_ok,
  input  logic                        p_ibw_we,     // requantised drain write
  input  logic                        p_div_done
);

  localparam int TM  = T*M;
  localparam int D1  = 4*R;            // layer 1 inputs: 2 sparse chunks
  localparam int D2  = 2*TM;           // layer 1 outputs = layer 2 inputs = layer 2 outputs
  localparam int NC2 = D2 / R;         // layer 2 dense chunks
  localparam int DMM = 2*R;            // MM inputs: 2 dense chunks
  localparam int DK  = 2*R;            // head dimension: 2 dense chunks
  localparam int NK  = 2*TM;           // keys: two tiles of TM
  localparam int GV  = (DK + TM - 1) / TM;   // output groups of exp x V
  localparam int NCV = TM / R;         // dense chunks of exp x V per key tile
  localparam int SH1 = 3;              // requantisation shift of layer 1
  localparam int ESH = 7;              // 1/sqrt(dk) shift of the scores
  // addresses
  localparam int IB_X1 = 0, IB_H = 4, IB_MM = 32, IB_Q = 40, IB_E = 48;
  localparam int WB_L1 = 0, WB_L2 = 4, WB_MM = 40, WB_K = 48, WB_V = 56;
  localparam int OB_L2 = 0, OB_MM = 64, OB_S = 128, OB_A = 160;

  int checks = 0, failures = 0;
  int n_mm = 0, n_vm = 0, n_sparse = 0, n_dense = 0, n_p8 = 0, n_p4 = 0, n_p2 = 0;
  int n_masked = 0, n_fused_wr = 0, n_div = 0, n_evict = 0, n_exp = 0, n_silu = 0, n_stream = 0, n_norm = 0;
  longint cyc = 0;

  initial clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (p_rce_valid) begin
      if (p_rce_mode == MODE_MM) n_mm++; else n_vm++;
      if (p_rce_sparse) n_sparse++; else n_dense++;
      case (p_rce_prec)
        P8X8: n_p8++;
        P8X4: n_p4++;
        default: n_p2++;
      endcase
    end
    if (p_exp_valid) begin
      n_exp++;
      if (!(&p_exp_lane_ok)) n_masked++;
    end
    if (p_ibw_we) n_fused_wr++;
    if (p_div_done) n_div++;
    if (wb_we && busy) n_stream++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---------------- model data ----------------
  logic [7:0] x1   [D1];
  logic [1:0] w1   [D2][D1/2];   // compressed 2-bit weights of layer 1
  logic [1:0] i1   [D2][D1/2];   // their 2:4 indices
  logic [7:0] w2   [D2][D2];
  logic [7:0] h    [D2];
  longint     y2   [D2];
  logic [7:0] xmm  [T][DMM];
  logic [3:0] wmm  [2*M][DMM];
  logic [7:0] q    [DK];
  logic [3:0] kk   [NK][DK];
  logic [3:0] vv   [NK][DK];

  // SiLU with the piecewise-linear sigmoid, 8 fractional bits
  function automatic longint silu_ref(longint v);
    longint a, sg;
    v  = longint'(int'(v));          // the output buffer holds 32-bit sums
    a  = (v < 0) ? -v : v;
    sg = (a < 256) ? a/4 + 128 : (a < 608) ? a/8 + 160 : (a < 1280) ? a/32 + 216 : 256;
    if (v < 0) sg = 256 - sg;
    return (v * sg) >>> 8;
  endfunction

  function automatic int sx(logic [7:0] v, int bits);
    case (bits)
      8: return int'(signed'(v));
      4: return int'(signed'(v[3:0]));
      default: return int'(signed'(v[1:0]));
    endcase
  endfunction

  function automatic int ref_e(longint sc, int sh, longint b, bit ok);
    longint s, y;
    int base;
    s = sc >>> sh;
    y = b - s;
    if (y < 0) y = 0;
    if (!ok || y >= 28) return 0;
    base = $rtoi(127.0 * $pow(2.0, -real'(y % 4) / 4.0) + 0.5);
    return base >> (y / 4);
  endfunction

  // ---------------- host helpers ----------------
  task automatic wb_write(int bank, int addr, logic [WBW-1:0] data);
    @(negedge clk);
    wb_we = 1; wb_bank = $bits(wb_bank)'(bank); wb_addr = $bits(wb_addr)'(addr); wb_wdata = data;
    @(negedge clk);
    wb_we = 0;
  endtask

  task automatic ib_write(int bank, int addr, logic [XBW-1:0] data);
    @(negedge clk);
    ib_we = 1; ib_bank = $bits(ib_bank)'(bank); ib_addr = $bits(ib_addr)'(addr); ib_wdata = data;
    @(negedge clk);
    ib_we = 0;
  endtask

  task automatic ob_read(int addr, output logic [OBW-1:0] data);
    @(negedge clk);
    ob_raddr = $bits(ob_raddr)'(addr);
    @(negedge clk);
    data = ob_rdata;
  endtask

  task automatic run(cmd_t c, output longint cycles);
    longint c0;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    c0 = cyc;
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
    cycles = cyc - c0;
  endtask

  function automatic cmd_t lin(mode_e md, prec_e p, logic sp, drain_e dr, int nch, int ngr,
                               int ib, int wb, int ob);
    cmd_t c;
    c = '0;
    c.op = OP_LINEAR; c.mode = md; c.prec = p; c.sparse = sp; c.drain = dr;
    c.n_chunks = 16'(nch); c.n_groups = 16'(ngr);
    c.ib_base = 16'(ib); c.wb_base = 16'(wb); c.ob_base = 16'(ob);
    return c;
  endfunction

  // ---------------- the program ----------------
  initial begin
    logic [OBW-1:0] rd;
    logic [WBW-1:0] wword;
    logic [XBW-1:0] xword;
    longint cy, score [NK], sref, aref [DK], smax;
    int ee [NK];
    cmd_t c;

    rst_n = 0; cmd_valid = 0; cmd = '0; wb_we = 0; wb_bank = '0; wb_addr = '0; wb_wdata = '0;
    ib_we = 0; ib_bank = '0; ib_addr = '0; ib_wdata = '0; ob_raddr = '0; kv_pos = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ===== 1. decode-stage layer fusion =====
    for (int i = 0; i < D1; i++) x1[i] = 8'($urandom);
    for (int o = 0; o < D2; o++) for (int r = 0; r < D1/2; r++) begin
      w1[o][r] = 2'($urandom);
      // the two kept weights of a group sit at distinct positions, in order
      i1[o][r] = (r % 2 == 0) ? 2'($urandom % 3) : 2'(i1[o][r-1] + 1 + $urandom % (3 - i1[o][r-1]));
    end
    for (int o = 0; o < D2; o++) for (int i = 0; i < D2; i++) w2[o][i] = 8'($urandom);

    for (int wd = 0; wd < D1/(2*R); wd++) begin
      for (int j = 0; j < 2*R; j++) xword[j*8 +: 8] = x1[wd*2*R + j];
      ib_write(0, IB_X1 + wd, xword);
    end
    // layer 1 weights: bank (t,m) word g*2+k holds output o = g*TM + t*M + m
    for (int g = 0; g < D2/TM; g++) for (int b = 0; b < TM; b++) for (int k = 0; k < 2; k++) begin
      wword = '0;
      for (int r = 0; r < R; r++) begin
        wword[r*8 +: 8]         = {6'b0, w1[g*TM + b][k*R + r]};
        wword[R*8 + 2*r +: 2]   = i1[g*TM + b][k*R + r];
      end
      wb_write(b, WB_L1 + g*2 + k, wword);
    end
    // model
    for (int o = 0; o < D2; o++) begin
      longint s;
      s = 0;
      for (int r = 0; r < D1/2; r++)
        s += longint'(x1[(r/2)*4 + i1[o][r]]) * sx({6'b0, w1[o][r]}, 2);
      s = s >>> SH1;
      h[o] = (s > 255) ? 8'd255 : (s < 0) ? 8'd0 : 8'(s);
    end
    for (int o = 0; o < D2; o++) begin
      y2[o] = 0;
      for (int i = 0; i < D2; i++) y2[o] += longint'(h[i]) * sx(w2[o][i], 8);
    end

    c = lin(MODE_VM, P8X2, 1'b1, DR_REQUANT, 2, D2/TM, IB_X1, WB_L1, 0);
    c.el_base = 16'(IB_H * 2 * R); c.shift = 5'(SH1);
    // layer 2 weights stream into the Weight/KV buffer while layer 1 runs
    fork
      run(c, cy);
      begin
        logic [WBW-1:0] w2word;
        for (int g = 0; g < D2/TM; g++) for (int b = 0; b < TM; b++) for (int k = 0; k < NC2; k++) begin
          w2word = '0;
          for (int r = 0; r < R; r++) w2word[r*8 +: 8] = w2[g*TM + b][k*R + r];
          wb_write(b, WB_L2 + g*NC2 + k, w2word);
        end
      end
    join
    // VM rate: one chunk per cycle, plus 2 pipeline and T+1 drain cycles per group
    chk(cy == longint'((D2/TM) * (2 + 2 + T + 1) + 1),
        $sformatf("layer 1 cycles %0d", cy));
    c = lin(MODE_VM, P8X8, 1'b0, DR_STORE, NC2, D2/TM, IB_H, WB_L2, OB_L2);
    run(c, cy);
    chk(cy == longint'((D2/TM) * (NC2 + 2 + T + 1) + 1),
        $sformatf("layer 2 cycles %0d", cy));
    for (int wd = 0; wd < D2/M; wd++) begin
      ob_read(OB_L2 + wd, rd);
      for (int m = 0; m < M; m++)
        chk(rd[m*32 +: 32] == 32'(y2[wd*M + m]),
            $sformatf("layer 2 out %0d got %0d exp %0d", wd*M + m,
                      signed'(rd[m*32 +: 32]), y2[wd*M + m]));
    end

    // ===== 2. prefill matrix product, MM mode =====
    for (int t = 0; t < T; t++) begin
      for (int i = 0; i < DMM; i++) xmm[t][i] = 8'($urandom);
      for (int j = 0; j < 2*R; j++) xword[j*8 +: 8] = xmm[t][j];
      ib_write(t, IB_MM, xword);
    end
    for (int o = 0; o < 2*M; o++) for (int i = 0; i < DMM; i++) wmm[o][i] = 4'($urandom);
    for (int g = 0; g < 2; g++) for (int m = 0; m < M; m++) for (int k = 0; k < 2; k++) begin
      wword = '0;
      for (int r = 0; r < R; r++) wword[r*8 +: 8] = {4'b0, wmm[g*M + m][k*R + r]};
      wb_write(m, WB_MM + g*2 + k, wword);   // tile 0 lanes, broadcast to all tiles
    end
    c = lin(MODE_MM, P8X4, 1'b0, DR_STORE, 2, 2, IB_MM, WB_MM, OB_MM);
    c.ob_stride = 16'd2;
    run(c, cy);
    for (int t = 0; t < T; t++) for (int g = 0; g < 2; g++) begin
      ob_read(OB_MM + t*2 + g, rd);
      for (int m = 0; m < M; m++) begin
        longint s;
        s = 0;
        for (int i = 0; i < DMM; i++) s += longint'(xmm[t][i]) * sx({4'b0, wmm[g*M + m][i]}, 4);
        chk(rd[m*32 +: 32] == 32'(s), $sformatf("MM token %0d out %0d", t, g*M + m));
      end
    end

    // ===== 2b. normalisation of token 0's MM output vector (2M elements) =====
    begin
      longint xs [2*M], ss, rr;
      for (int g = 0; g < 2; g++) begin
        ob_read(OB_MM + g, rd);
        for (int m = 0; m < M; m++) xs[g*M + m] = longint'(signed'(rd[m*32 +: 32]));
      end
      ss = 0;
      for (int i = 0; i < 2*M; i++) ss += xs[i] * xs[i];
      rr = longint'($floor($sqrt(real'(ss >> $clog2(2*M)))));
      while (rr * rr > (ss >> $clog2(2*M))) rr--;
      while ((rr + 1) * (rr + 1) <= (ss >> $clog2(2*M))) rr++;
      if (rr == 0) rr = 1;
      c = '0; c.op = OP_NORM; c.n_groups = 16'd2; c.ob_base = 16'(OB_MM);
      c.shift = 5'($clog2(2*M));
      run(c, cy);
      for (int g = 0; g < 2; g++) begin
        ob_read(OB_MM + g, rd);
        for (int m = 0; m < M; m++) begin
          n_norm++;
          chk(rd[m*32 +: 32] == 32'((xs[g*M + m] * 256) / rr),
              $sformatf("norm %0d got %0d exp %0d (rms %0d)", g*M + m,
                        signed'(rd[m*32 +: 32]), (xs[g*M + m] * 256) / rr, rr));
        end
      end
    end

    // ===== 3. fused attention, one query, two key tiles =====
    kv_pos = 32'(NK - 4);              // visible keys: NK-3, so 3 keys are masked
    @(negedge clk);
    for (int i = 0; i < DK; i++) q[i] = 8'($urandom % 16);
    for (int n = 0; n < NK; n++) for (int i = 0; i < DK; i++) begin
      kk[n][i] = 4'($urandom); vv[n][i] = 4'($urandom);
    end
    for (int j = 0; j < 2*R; j++) xword[j*8 +: 8] = q[j];
    ib_write(0, IB_Q, xword);
    for (int jt = 0; jt < 2; jt++) for (int b = 0; b < TM; b++) begin
      for (int k = 0; k < 2; k++) begin
        wword = '0;
        for (int r = 0; r < R; r++) wword[r*8 +: 8] = {4'b0, kk[jt*TM + b][k*R + r]};
        wb_write(b, WB_K + jt*2 + k, wword);
      end
      for (int g = 0; g < GV; g++) for (int k = 0; k < NCV; k++) begin
        int o;
        o = g*TM + b;
        wword = '0;
        for (int r = 0; r < R; r++)
          wword[r*8 +: 8] = (o < DK) ? {4'b0, vv[jt*TM + k*R + r][o]} : 8'd0;
        wb_write(b, WB_V + (jt*GV + g)*NCV + k, wword);
      end
    end
    // model
    smax = -(longint'(1) << 40);
    for (int n = 0; n < NK; n++) begin
      score[n] = 0;
      for (int i = 0; i < DK; i++) score[n] += longint'(q[i]) * sx({4'b0, kk[n][i]}, 4);
      if (n < int'(kv_n_valid) && (score[n] >>> ESH) > smax) smax = score[n] >>> ESH;
    end
    sref = 0;
    for (int n = 0; n < NK; n++) begin
      ee[n] = ref_e(score[n], ESH, smax, n < int'(kv_n_valid));
      sref += ee[n];
    end
    for (int o = 0; o < DK; o++) begin
      aref[o] = 0;
      for (int n = 0; n < NK; n++) aref[o] += longint'(ee[n]) * sx({4'b0, vv[n][o]}, 4);
    end
    for (int jt = 0; jt < 2; jt++) begin
      // stage 1: scores of TM keys
      c = lin(MODE_VM, P8X4, 1'b0, DR_STORE, 2, 1, IB_Q, WB_K + jt*2, OB_S);
      run(c, cy);
      // stages 2-3: exp and running sum
      c = '0; c.op = OP_EXP; c.n_groups = 16'(TM/M); c.ob_base = 16'(OB_S);
      c.el_base = 16'(IB_E * 2 * R); c.key_base = 16'(jt*TM); c.shift = 5'(ESH);
      c.bias = 16'(smax); c.sum_clr = (jt == 0);
      run(c, cy);
      // stages 4-5: exp x V, accumulated over key tiles in the output buffer
      c = lin(MODE_VM, P8X4, 1'b0, (jt == 0) ? DR_STORE : DR_ACCUM, NCV, GV,
              IB_E, WB_V + jt*GV*NCV, OB_A);
      run(c, cy);
    end
    chk(exp_sum == 32'(sref), $sformatf("exp sum got %0d exp %0d", exp_sum, sref));
    c = '0; c.op = OP_DIV; c.n_groups = 16'((DK + M - 1)/M); c.ob_base = 16'(OB_A);
    run(c, cy);
    for (int wd = 0; wd < (DK + M - 1)/M; wd++) begin
      ob_read(OB_A + wd, rd);
      for (int m = 0; m < M; m++) begin
        longint qv;
        if (wd*M + m >= DK) continue;
        qv = (sref == 0) ? 0 : (aref[wd*M + m] * 256) / sref;
        chk(rd[m*32 +: 32] == 32'(qv), $sformatf("attention out %0d got %0d exp %0d",
            wd*M + m, signed'(rd[m*32 +: 32]), qv));
      end
    end

    // ===== 4. SiLU of the layer-2 outputs, in place in the output buffer =====
    c = '0; c.op = OP_SILU; c.n_groups = 16'(D2/M); c.ob_base = 16'(OB_L2);
    run(c, cy);
    chk(cy == 2*(D2/M) + 1, $sformatf("silu cycles %0d", cy));
    for (int wd = 0; wd < D2/M; wd++) begin
      ob_read(OB_L2 + wd, rd);
      for (int m = 0; m < M; m++) begin
        longint sv;
        sv = silu_ref(y2[wd*M + m]);
        n_silu++;
        chk(rd[m*32 +: 32] == 32'(sv), $sformatf("silu %0d got %0d exp %0d",
            wd*M + m, signed'(rd[m*32 +: 32]), sv));
      end
    end

    // ===== 5. Lambda-shaped KV cache slots =====
    for (int p = 0; p < 3; p++) begin
      int pos;
      pos = (p == 0) ? 2 : (p == 1) ? int'(KV_SINK + KV_WIN + 7) : 100000;
      kv_pos = 32'(pos);
      @(negedge clk);
      chk(kv_slot == SW'((pos < KV_SINK) ? pos : KV_SINK + (pos - KV_SINK) % KV_WIN), "kv slot");
      chk(kv_evict == (pos >= KV_SINK + KV_WIN), "kv evict");
      if (kv_evict) n_evict++;
      chk(kv_n_valid == 16'((pos + 1 < KV_SINK + KV_WIN) ? pos + 1 : KV_SINK + KV_WIN), "kv n_valid");
    end

    // ===== mechanisms =====
    $display("mechanisms: MM beats %0d, VM beats %0d, sparse %0d, dense %0d, P8X8 %0d, P8X4 %0d, P8X2 %0d",
             n_mm, n_vm, n_sparse, n_dense, n_p8, n_p4, n_p2);
    $display("            exp beats %0d (masked %0d), input-buffer writes by requant %0d, divisions %0d, SiLU %0d, normalised %0d, evictions %0d, weight words loaded while busy %0d",
             n_exp, n_masked, n_fused_wr, n_div, n_silu, n_norm, n_evict, n_stream);
    chk(n_mm > 0, "MM mode never used");
    chk(n_vm > 0, "VM mode never used");
    chk(n_sparse > 0, "sparse selection never used");
    chk(n_dense > 0, "dense mode never used");
    chk(n_p8 > 0 && n_p4 > 0 && n_p2 > 0, "a precision mode never used");
    chk(n_exp > 0 && n_masked > 0, "exp masking never happened");
    chk(n_fused_wr > 0, "layer fusion never wrote the input buffer");
    chk(n_div > 0, "division never ran");
    chk(n_silu > 0, "SiLU never ran");
    chk(n_norm > 0, "normalisation never ran");
    chk(n_stream > 0, "weights never streamed in during a command");
    chk(n_evict > 0, "KV eviction never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
