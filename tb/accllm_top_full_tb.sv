// accllm_top_full_tb: the same end-to-end program as accllm_top_tb, run on the
// accelerator at its default size, (R x M) x T = (32 x 16) x 16.
module accllm_top_full_tb;
  import accllm_pkg::*;
  localparam int R = R_DEF, M = M_DEF, T = T_DEF;

  logic clk, rst_n, cmd_valid, cmd_ready, busy, done, wb_we, ib_we, kv_evict;
  cmd_t cmd;
  logic [$clog2(T*M)-1:0] wb_bank;
  logic [6:0] wb_addr;
  logic [R*8+2*R-1:0] wb_wdata;
  logic [$clog2(T)-1:0] ib_bank;
  logic [7:0] ib_addr;
  logic [2*R*8-1:0] ib_wdata;
  logic [9:0] ob_raddr;
  logic [M*32-1:0] ob_rdata;
  logic [31:0] kv_pos, exp_sum;
  logic [10:0] kv_slot;
  logic [15:0] kv_n_valid;

  accllm_top dut (.*);

  accllm_top_driver #(.R(R), .M(M), .T(T), .WATCHDOG(400000)) drv (
    .*,
    .p_rce_valid(dut.rce_valid), .p_rce_mode(dut.rce_mode), .p_rce_prec(dut.rce_prec),
    .p_rce_sparse(dut.rce_sparse), .p_exp_valid(dut.exp_valid),
    .p_exp_lane_ok(dut.exp_lane_ok), .p_ibw_we(dut.c_ibw_we && dut.u_ctrl.dv),
    .p_div_done(dut.div_done)
  );
endmodule
