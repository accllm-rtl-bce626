// controller: command sequencer of the accelerator.
//
// The controller runs one command at a time (cmd_valid/cmd_ready handshake; busy
// while running, done pulses at the end). Three operations:
//
// OP_LINEAR  A (part of a) linear layer, or one matrix product of attention, on the
//   RCE. For each output group g (n_groups of them) it streams n_chunks input
//   chunks k: weight word wb_base + g*n_chunks + k is read from every Weight/KV bank,
//   input word ib_base + k (sparse: 2R elements per chunk) or ib_base + k/2, half k%2
//   (dense: R elements per chunk) from every Input bank. One chunk per cycle; the
//   first chunk restarts the accumulators. Two cycles after the last beat the T x M
//   accumulators are drained, one tile per cycle:
//     DR_STORE   write tile t's M sums to the Output buffer,
//     DR_ACCUM   add them to what the Output buffer holds (fused-attention stage 5),
//     DR_REQUANT shift right by `shift`, saturate to uint8 and write them into the
//                Input buffer as the next layer's input (decode-stage layer fusion).
//   Output word of tile t: VM mode ob_base + g*T + t (output channel o = g*T*M+t*M+m
//   sits in word o/M, lane o%M); MM mode ob_base + t*ob_stride + g (token t).
//   Requantised elements: VM el_base + (g*T+t)*M + m in bank 0; MM el_base + g*M + m
//   in bank t. Element e is byte e%(2R) of word e/(2R).
// OP_EXP  Fused-attention stages 2-3: n_groups Output words from ob_base go through
//   the NPE exp unit; the exp values are written to Input bank 0 from element el_base
//   on, and summed. Score lane j = key_base + w*M + m is masked when j >= kv_n_valid.
// OP_DIV  Final step of fused attention: each of n_groups Output words from ob_base is
//   divided by the exp sum and written back in place.
// OP_NORM  Normalisation: pass 1 reads n_groups Output words from ob_base into the
//   NPE RMS unit (sum of squares), which then takes sqrt(sum >> shift); pass 2 divides
//   every word by that root mean square with the NPE divider, in place (the same
//   steps as OP_DIV, with the RMS as divisor: norm_div is high for the command).
// OP_SILU  Activation: each of n_groups Output words from ob_base goes through the
//   NPE SiLU unit and is written back in place, two cycles per word.
// Pipeline: buffer reads take one cycle, the RCE two, the exp unit one.
// The paper names the controller and its role only; command set, address layout and
// loop order are this design's own.
module controller
  import accllm_pkg::*;
#(
  parameter int unsigned R = R_DEF,
  parameter int unsigned M = M_DEF,
  parameter int unsigned T = T_DEF,
  localparam int unsigned XBW = 2*R*XW,    // input buffer word width
  localparam int unsigned OBW = M*ACC_W    // output buffer word width
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // command
  input  logic                    cmd_valid,
  output logic                    cmd_ready,
  input  cmd_t                    cmd,
  output logic                    busy,
  output logic                    done,
  // RCE
  output logic [15:0]             ib_raddr,
  output logic [15:0]             wb_raddr,
  output logic                    rce_valid,
  output logic                    rce_first,
  output logic                    in_half,
  output mode_e                   rce_mode,
  output prec_e                   rce_prec,
  output logic                    rce_sparse,
  input  logic signed [ACC_W-1:0] acc [T][M],
  // output buffer
  output logic [15:0]             ob_raddr,
  input  logic [OBW-1:0]          ob_rdata,
  output logic                    ob_we,
  output logic [15:0]             ob_waddr,
  output logic [OBW-1:0]          ob_wdata,
  // input buffer write (layer fusion, exp values)
  output logic                    ibw_we,
  output logic [$clog2(T)-1:0]    ibw_bank,
  output logic [15:0]             ibw_addr,
  output logic [XBW-1:0]          ibw_data,
  output logic [2*R-1:0]          ibw_be,
  // NPE exp
  output logic                    exp_valid,
  output logic                    exp_clr,
  output logic [M-1:0]            exp_lane_ok,
  output logic [4:0]              exp_shift,
  output logic signed [15:0]      exp_bias,
  input  logic [XW-1:0]           exp_e [M],
  input  logic [15:0]             kv_n_valid,
  // NPE divider
  output logic                    div_start,
  input  logic                    div_done,
  input  logic signed [ACC_W-1:0] div_quo [M],
  // NPE RMS unit (normalisation)
  output logic                    rms_valid,
  output logic                    rms_clr,
  output logic                    rms_go,
  input  logic                    rms_done,
  output logic                    norm_div,
  // NPE SiLU (combinational on ob_rdata)
  input  logic signed [ACC_W-1:0] silu_y [M]
);

  typedef enum logic [3:0] {
    S_IDLE, S_FEED, S_WAIT, S_DRAIN, S_EXP, S_EXP_TAIL, S_DIV_RD, S_DIV_GO, S_DIV_WAIT,
    S_ACT_RD, S_ACT_WR, S_NRM_RD, S_NRM_ACC, S_NRM_GO, S_NRM_WAIT
  } state_e;

  state_e      state;
  cmd_t        c;
  logic [15:0] g, k, w;
  logic [15:0] i;                 // drain step / exp drain counter
  logic [1:0]  wcnt;

  // delayed control for the one-cycle buffer read
  logic        v1, first1, half1;
  // exp pipeline
  logic        ev1, ev2;
  logic [15:0] ew1, ew2;
  // drain write stage
  logic        dv;
  logic [15:0] dt;

  assign cmd_ready  = (state == S_IDLE);
  assign busy       = (state != S_IDLE);
  assign rce_valid  = v1;
  assign rce_first  = first1;
  assign in_half    = half1;
  assign rce_mode   = c.mode;
  assign rce_prec   = c.prec;
  assign rce_sparse = c.sparse;
  assign exp_shift  = c.shift;
  assign exp_bias   = c.bias;
  assign rms_valid  = (state == S_NRM_ACC);
  assign rms_clr    = (state == S_NRM_ACC) && (w == 0);
  assign rms_go     = (state == S_NRM_GO);
  assign norm_div   = (c.op == OP_NORM);

  // read addresses
  always_comb begin
    ib_raddr = c.ib_base + (c.sparse ? k : (k >> 1));
    wb_raddr = c.wb_base + 16'(g * c.n_chunks) + k;
    ob_raddr = '0;
    unique case (state)
      S_DRAIN:  ob_raddr = drain_addr(i);
      S_EXP:    ob_raddr = c.ob_base + w;
      S_DIV_RD: ob_raddr = c.ob_base + w;
      S_ACT_RD: ob_raddr = c.ob_base + w;
      S_NRM_RD: ob_raddr = c.ob_base + w;
      default:  ob_raddr = '0;
    endcase
  end

  function automatic logic [15:0] drain_addr(input logic [15:0] t);
    if (c.mode == MODE_VM) return c.ob_base + 16'(g * T) + t;
    else                   return c.ob_base + 16'(t * c.ob_stride) + g;
  endfunction

  // exp: lane mask from the Lambda-attention visible-key count
  always_comb begin
    for (int m = 0; m < M; m++)
      exp_lane_ok[m] = (32'(c.key_base) + 32'(ew1) * M + m) < 32'(kv_n_valid);
    exp_valid = ev1;
    exp_clr   = ev1 && (ew1 == 0) && c.sum_clr;
  end

  // writes to the output and input buffers
  always_comb begin
    logic [15:0] el;
    ob_we    = 1'b0;
    ob_waddr = '0;
    ob_wdata = '0;
    ibw_we   = 1'b0;
    ibw_bank = '0;
    ibw_addr = '0;
    ibw_data = '0;
    ibw_be   = '0;
    el       = '0;
    div_start = (state == S_DIV_GO);
    if (dv) begin
      unique case (c.drain)
        DR_STORE, DR_ACCUM: begin
          ob_we    = 1'b1;
          ob_waddr = drain_addr(dt);
          for (int m = 0; m < M; m++)
            ob_wdata[m*ACC_W +: ACC_W] = (c.drain == DR_ACCUM)
              ? acc[dt[$clog2(T)-1:0]][m] + ob_rdata[m*ACC_W +: ACC_W]
              : acc[dt[$clog2(T)-1:0]][m];
        end
        default: begin // DR_REQUANT
          ibw_we   = 1'b1;
          if (c.mode == MODE_VM) begin
            el = c.el_base + 16'((32'(g) * T + 32'(dt)) * M);
          end else begin
            el       = c.el_base + 16'(32'(g) * M);
            ibw_bank = dt[$clog2(T)-1:0];
          end
          ibw_addr = el / 16'(2*R);
          for (int m = 0; m < M; m++) begin
            ibw_data[((32'(el) % (2*R)) + m)*XW +: XW] =
              satu8(acc[dt[$clog2(T)-1:0]][m] >>> c.shift);
            ibw_be[(32'(el) % (2*R)) + m] = 1'b1;
          end
        end
      endcase
    end else if (ev2) begin
      el       = c.el_base + 16'(32'(ew2) * M);
      ibw_we   = 1'b1;
      ibw_addr = el / 16'(2*R);
      for (int m = 0; m < M; m++) begin
        ibw_data[((32'(el) % (2*R)) + m)*XW +: XW] = exp_e[m];
        ibw_be[(32'(el) % (2*R)) + m] = 1'b1;
      end
    end else if (state == S_DIV_WAIT && div_done) begin
      ob_we    = 1'b1;
      ob_waddr = c.ob_base + w;
      for (int m = 0; m < M; m++) ob_wdata[m*ACC_W +: ACC_W] = div_quo[m];
    end else if (state == S_ACT_WR) begin
      ob_we    = 1'b1;
      ob_waddr = c.ob_base + w;
      for (int m = 0; m < M; m++) ob_wdata[m*ACC_W +: ACC_W] = silu_y[m];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      c      <= '0;
      g      <= '0;
      k      <= '0;
      w      <= '0;
      i      <= '0;
      wcnt   <= '0;
      v1     <= 1'b0;
      first1 <= 1'b0;
      half1  <= 1'b0;
      ev1    <= 1'b0;
      ev2    <= 1'b0;
      ew1    <= '0;
      ew2    <= '0;
      dv     <= 1'b0;
      dt     <= '0;
      done   <= 1'b0;
    end else begin
      done   <= 1'b0;
      v1     <= (state == S_FEED);
      first1 <= (state == S_FEED) && (k == 0);
      half1  <= !c.sparse && k[0];
      ev1    <= (state == S_EXP);
      ew1    <= w;
      ev2    <= ev1;
      ew2    <= ew1;
      dv     <= (state == S_DRAIN) && (i < 16'(T));
      dt     <= i;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c <= cmd;
          g <= '0;
          k <= '0;
          w <= '0;
          unique case (cmd.op)
            OP_LINEAR: state <= (cmd.n_groups == 0 || cmd.n_chunks == 0) ? S_IDLE : S_FEED;
            OP_EXP:    state <= (cmd.n_groups == 0) ? S_IDLE : S_EXP;
            OP_DIV:    state <= (cmd.n_groups == 0) ? S_IDLE : S_DIV_RD;
            OP_NORM:   state <= (cmd.n_groups == 0) ? S_IDLE : S_NRM_RD;
            default:   state <= (cmd.n_groups == 0) ? S_IDLE : S_ACT_RD;
          endcase
        end
        S_FEED: begin
          if (k == c.n_chunks - 1) begin
            k     <= '0;
            wcnt  <= 2'd1;
            state <= S_WAIT;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_WAIT: begin
          if (wcnt == 0) begin
            i     <= '0;
            state <= S_DRAIN;
          end else begin
            wcnt <= wcnt - 1'b1;
          end
        end
        S_DRAIN: begin
          if (i == 16'(T)) begin
            if (g == c.n_groups - 1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              g     <= g + 1'b1;
              state <= S_FEED;
            end
          end else begin
            i <= i + 1'b1;
          end
        end
        S_EXP: begin
          if (w == c.n_groups - 1) begin
            wcnt  <= 2'd1;
            state <= S_EXP_TAIL;
          end
          w <= w + 1'b1;
        end
        S_EXP_TAIL: begin
          if (wcnt == 0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            wcnt <= wcnt - 1'b1;
          end
        end
        S_DIV_RD: state <= S_DIV_GO;
        S_DIV_GO: state <= S_DIV_WAIT;
        S_DIV_WAIT: if (div_done) begin
          if (w == c.n_groups - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            w     <= w + 1'b1;
            state <= S_DIV_RD;
          end
        end
        S_NRM_RD: state <= S_NRM_ACC;
        S_NRM_ACC: begin
          if (w == c.n_groups - 1) begin
            w     <= '0;
            state <= S_NRM_GO;
          end else begin
            w     <= w + 1'b1;
            state <= S_NRM_RD;
          end
        end
        S_NRM_GO: state <= S_NRM_WAIT;
        S_NRM_WAIT: if (rms_done) state <= S_DIV_RD;
        S_ACT_RD: state <= S_ACT_WR;
        S_ACT_WR: begin
          if (w == c.n_groups - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            w     <= w + 1'b1;
            state <= S_ACT_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
