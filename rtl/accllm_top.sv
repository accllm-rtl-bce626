// accllm_top: the accelerator.
//
// A reconfigurable compute array (RCE, T tiles x M PE blocks x R multipliers, with
// 2:4 sparse selectors and DSP-packed mixed-precision multipliers) is fed from banked
// on-chip buffers and sequenced by the controller; a nonlinear engine (NPE) supplies
// the exp/sum and divide steps of fused attention, the SiLU activation and the
// root mean square of normalisation; a Lambda-attention address unit
// maps token positions onto the fixed-size KV cache.
//
// Buffers:
//   Weight/KV buffer  T*M banks (bank t*M+m feeds block m of tile t), WB_DEPTH words
//                     of R weight bytes (bits 8r+7:8r) and R 2-bit 2:4 indices
//                     (bits 8R+2r+1:8R+2r). K and V rows are stored like weights.
//   Input buffer      T banks (bank t = token t of an MM tile group; bank 0 in VM
//                     mode), IB_DEPTH words of 2R activation bytes.
//   Output buffer     one bank, OB_DEPTH words of M 32-bit sums.
// Off-chip HBM/DDR, their AXI ports and the PCIe host are outside this module: the
// weight/KV and input load ports, the output read port and the command port stand
// in for them. Input loads and output reads are accepted while busy = 0; the
// Weight/KV buffer has its own write port, so weights can stream in while a command
// runs (the host keeps them out of the words that command reads).
//
// Interface timing: ob_rdata follows ob_raddr by one cycle. A command is accepted
// when cmd_valid and cmd_ready are both high; done pulses when it has finished.
// kv_slot / kv_evict / kv_n_valid are combinational in kv_pos; kv_n_valid also
// masks the exp unit's lanes (keys beyond the filled cache are ignored).
// Block structure and connections follow the paper's micro-architecture figure;
// buffer organisation and the port set are this design's choices.
module accllm_top
  import accllm_pkg::*;
#(
  parameter int unsigned R        = R_DEF,
  parameter int unsigned M        = M_DEF,
  parameter int unsigned T        = T_DEF,
  parameter int unsigned WB_DEPTH = 128,
  parameter int unsigned IB_DEPTH = 256,
  parameter int unsigned OB_DEPTH = 1024,
  localparam int unsigned WBW = R*WW + 2*R,
  localparam int unsigned XBW = 2*R*XW,
  localparam int unsigned OBW = M*ACC_W
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // command port (host)
  input  logic                           cmd_valid,
  output logic                           cmd_ready,
  input  cmd_t                           cmd,
  output logic                           busy,
  output logic                           done,
  // weight / KV load port (from HBM)
  input  logic                           wb_we,
  input  logic [$clog2(T*M)-1:0]         wb_bank,
  input  logic [$clog2(WB_DEPTH)-1:0]    wb_addr,
  input  logic [WBW-1:0]                 wb_wdata,
  // input load port (from DDR)
  input  logic                           ib_we,
  input  logic [$clog2(T)-1:0]           ib_bank,
  input  logic [$clog2(IB_DEPTH)-1:0]    ib_addr,
  input  logic [XBW-1:0]                 ib_wdata,
  // output read port (to DDR)
  input  logic [$clog2(OB_DEPTH)-1:0]    ob_raddr,
  output logic [OBW-1:0]                 ob_rdata,
  // Lambda-shaped KV cache addressing
  input  logic [31:0]                    kv_pos,
  output logic [$clog2(KV_SINK+KV_WIN)-1:0] kv_slot,
  output logic                           kv_evict,
  output logic [15:0]                    kv_n_valid,
  // softmax denominator of the current attention row
  output logic [ACC_W-1:0]               exp_sum
);

  // ---------------- controller ----------------
  logic [15:0]             c_ib_raddr, c_wb_raddr, c_ob_raddr, c_ob_waddr, c_ibw_addr;
  logic                    rce_valid, rce_first, in_half, rce_sparse;
  mode_e                   rce_mode;
  prec_e                   rce_prec;
  logic signed [ACC_W-1:0] acc [T][M];
  logic                    c_ob_we, c_ibw_we;
  logic [OBW-1:0]          c_ob_wdata;
  logic [$clog2(T)-1:0]    c_ibw_bank;
  logic [XBW-1:0]          c_ibw_data;
  logic [2*R-1:0]          c_ibw_be;
  logic                    exp_valid, exp_clr;
  logic [M-1:0]            exp_lane_ok;
  logic [4:0]              exp_shift;
  logic signed [15:0]      exp_bias;
  logic [XW-1:0]           exp_e [M];
  logic                    div_start, div_busy, div_done;
  logic signed [ACC_W-1:0] div_quo [M];
  logic signed [ACC_W-1:0] silu_y [M];
  logic                    rms_valid, rms_clr, rms_go, rms_busy, rms_done, norm_div;
  logic [ACC_W-1:0]        rms;
  logic signed [ACC_W-1:0] ob_lanes [M];
  logic [$clog2(KV_SINK+KV_WIN+1)-1:0] n_valid;

  controller #(.R(R), .M(M), .T(T)) u_ctrl (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd(cmd), .busy(busy), .done(done),
    .ib_raddr(c_ib_raddr), .wb_raddr(c_wb_raddr),
    .rce_valid(rce_valid), .rce_first(rce_first), .in_half(in_half),
    .rce_mode(rce_mode), .rce_prec(rce_prec), .rce_sparse(rce_sparse), .acc(acc),
    .ob_raddr(c_ob_raddr), .ob_rdata(ob_rdata),
    .ob_we(c_ob_we), .ob_waddr(c_ob_waddr), .ob_wdata(c_ob_wdata),
    .ibw_we(c_ibw_we), .ibw_bank(c_ibw_bank), .ibw_addr(c_ibw_addr),
    .ibw_data(c_ibw_data), .ibw_be(c_ibw_be),
    .exp_valid(exp_valid), .exp_clr(exp_clr), .exp_lane_ok(exp_lane_ok),
    .exp_shift(exp_shift), .exp_bias(exp_bias), .exp_e(exp_e),
    .kv_n_valid(kv_n_valid),
    .div_start(div_start), .div_done(div_done), .div_quo(div_quo),
    .rms_valid(rms_valid), .rms_clr(rms_clr), .rms_go(rms_go), .rms_done(rms_done),
    .norm_div(norm_div), .silu_y(silu_y)
  );

  // ---------------- Weight/KV buffer ----------------
  logic [WBW-1:0] wb_rdata [T*M];
  logic [WW-1:0]  w_op     [T][M][R];
  logic [1:0]     idx_op   [T][M][R];

  for (genvar b = 0; b < T*M; b++) begin : g_wbuf
    buffer_ram #(.WIDTH(WBW), .DEPTH(WB_DEPTH)) u_bank (
      .clk(clk),
      .we(wb_we && (wb_bank == b)), .waddr(wb_addr),
      .wdata(wb_wdata), .wbe('1),
      .raddr(c_wb_raddr[$clog2(WB_DEPTH)-1:0]), .rdata(wb_rdata[b])
    );
    for (genvar r = 0; r < R; r++) begin : g_lane
      assign w_op  [b/M][b%M][r] = wb_rdata[b][r*WW +: WW];
      assign idx_op[b/M][b%M][r] = wb_rdata[b][R*WW + 2*r +: 2];
    end
  end

  // ---------------- Input buffer ----------------
  logic [XBW-1:0] ib_rdata [T];
  logic [XW-1:0]  x_op     [T][2*R];

  for (genvar t = 0; t < T; t++) begin : g_ibuf
    logic                    we_t;
    logic [$clog2(IB_DEPTH)-1:0] wa_t;
    logic [XBW-1:0]          wd_t;
    logic [2*R-1:0]          be_t;
    always_comb begin
      if (busy) begin
        we_t = c_ibw_we && (c_ibw_bank == t);
        wa_t = c_ibw_addr[$clog2(IB_DEPTH)-1:0];
        wd_t = c_ibw_data;
        be_t = c_ibw_be;
      end else begin
        we_t = ib_we && (ib_bank == t);
        wa_t = ib_addr;
        wd_t = ib_wdata;
        be_t = '1;
      end
    end
    buffer_ram #(.WIDTH(XBW), .DEPTH(IB_DEPTH)) u_bank (
      .clk(clk), .we(we_t), .waddr(wa_t), .wdata(wd_t), .wbe(be_t),
      .raddr(c_ib_raddr[$clog2(IB_DEPTH)-1:0]), .rdata(ib_rdata[t])
    );
    // dense chunks use R elements: lower or upper half of the word
    always_comb begin
      for (int j = 0; j < 2*R; j++) begin
        if (!in_half)   x_op[t][j] = ib_rdata[t][j*XW +: XW];
        else if (j < R) x_op[t][j] = ib_rdata[t][(R+j)*XW +: XW];
        else            x_op[t][j] = '0;
      end
    end
  end

  // ---------------- Output buffer ----------------
  buffer_ram #(.WIDTH(OBW), .DEPTH(OB_DEPTH)) u_obuf (
    .clk(clk), .we(c_ob_we), .waddr(c_ob_waddr[$clog2(OB_DEPTH)-1:0]),
    .wdata(c_ob_wdata), .wbe('1),
    .raddr(busy ? c_ob_raddr[$clog2(OB_DEPTH)-1:0] : ob_raddr), .rdata(ob_rdata)
  );

  always_comb
    for (int m = 0; m < M; m++) ob_lanes[m] = signed'(ob_rdata[m*ACC_W +: ACC_W]);

  // ---------------- RCE ----------------
  rce #(.R(R), .M(M), .T(T)) u_rce (
    .clk(clk), .rst_n(rst_n), .valid(rce_valid), .first(rce_first),
    .mode(rce_mode), .prec(rce_prec), .sparse(rce_sparse),
    .x_tok(x_op), .w(w_op), .idx(idx_op), .acc(acc)
  );

  // ---------------- NPE ----------------
  npe_softmax_exp #(.M(M)) u_exp (
    .clk(clk), .rst_n(rst_n), .valid(exp_valid), .clr(exp_clr),
    .shift(exp_shift), .bias(exp_bias), .score(ob_lanes), .lane_ok(exp_lane_ok),
    .e(exp_e), .sum(exp_sum)
  );

  npe_divider #(.M(M)) u_div (
    .clk(clk), .rst_n(rst_n), .start(div_start), .num(ob_lanes), .den(norm_div ? rms : exp_sum),
    .busy(div_busy), .done(div_done), .quo(div_quo)
  );

  npe_silu #(.M(M)) u_silu (.x(ob_lanes), .y(silu_y));

  npe_rms #(.M(M)) u_rms (
    .clk(clk), .rst_n(rst_n), .clr(rms_clr), .valid(rms_valid), .x(ob_lanes),
    .go(rms_go), .shift(exp_shift), .busy(rms_busy), .done(rms_done), .rms(rms)
  );

  // ---------------- Lambda-shaped KV cache addressing ----------------
  lambda_kv_addr u_kv (
    .pos(kv_pos), .slot(kv_slot), .n_valid(n_valid), .evict(kv_evict)
  );
  assign kv_n_valid = 16'(n_valid);

endmodule
