// rtc_top: full Refresh Triggered Computation (full-RTC) for one DRAM bank.
//
// Memory controller side: rtc_frontend (reconfiguration FSM, rate matching,
// refresh-interval timer, command link arbitration).  DRAM side:
// dram_cmd_decoder, rtc_backend (Act/Read/Write/Pre state machine) and
// rtc_bank (Configurable Refresh Counter, Row and Column AGUs, address
// multiplexers).  The DRAM cell array with its decoders and row buffer is not
// part of the RTL: its command, address and data signals are the arr_*
// ports.  The base memory controller's conventional commands enter on mc_*.
// The data bus runs between the array and the accelerator and is not touched
// by RTC; acc_wr_take marks each cycle of an RTT write slot in which the
// accelerator's write data goes to the array, and acc_rd_valid the cycle in
// which read data comes back (one cycle after RD).
//
// Latency from the link to the array is one cycle (the decoder register).  A
// refresh slot starts every REFI_CYCLES cycles while cke is high (default
// 195: 64 ms / 65,536 rows at 200 MHz, one row per slot); while cke
// is low the bank refreshes its PAAR range by itself at the same interval.
module rtc_top
  import rtc_pkg::*;
#(
  parameter int unsigned ROW_W       = 16,
  parameter int unsigned COL_W       = 10,
  parameter int unsigned CFG_W       = 32,
  parameter int unsigned REFI_CYCLES = 195
) (
  input  logic              clk,
  input  logic              rst_n,
  // RTC configuration from the application
  input  logic              ld,
  input  logic              refr,
  input  logic              rtt,
  input  logic              rate_fsm,
  input  logic              cfg_valid,
  input  logic [CFG_W-1:0]  cfg_data,
  output logic              cfg_ready,
  input  logic              we,
  input  logic              rtc_en,
  input  logic              cke,
  // conventional commands from the base memory controller
  input  dram_cmd_e         mc_cmd,
  input  logic [ROW_W-1:0]  mc_row,
  input  logic [COL_W-1:0]  mc_col,
  output logic              mc_ready,
  // accelerator data
  output logic              acc_wr_take,
  output logic              acc_rd_valid,
  // DRAM bank array
  output arr_cmd_e          arr_cmd,
  output logic [ROW_W-1:0]  arr_row,
  output logic [COL_W-1:0]  arr_col,
  output logic              arr_rtt,
  output logic              arr_explicit,
  // status
  output logic              fe_active,
  output logic              slot_tick,
  output logic              be_idle,
  output logic              cfg_busy,
  output logic [ROW_W-1:0]  ref_row,
  output logic [ROW_W-1:0]  ref_start,
  output logic [ROW_W-1:0]  ref_end
);

  // link
  dram_cmd_e        link_cmd;
  logic [ROW_W-1:0] link_row;
  logic [COL_W-1:0] link_col;
  cfg_reg_e         link_cfg_reg;
  logic [CFG_W-1:0] link_cfg_data;
  logic             link_exp_ref, link_we, link_ld, link_cke;
  // decoder outputs
  logic             dec_act, dec_rd, dec_wr, dec_pre, dec_ref;
  logic [ROW_W-1:0] row_id;
  logic [COL_W-1:0] col_id;
  logic             cfg_we, slot_valid, slot_exp_ref, slot_we, d_ld, d_cke;
  cfg_reg_e         cfg_reg;
  logic [CFG_W-1:0] d_cfg_data;
  // backend to bank
  logic ld_ref_start, ld_ref_end, ld_row_rate, ld_row_base, ld_row_count;
  logic ld_col_rate, ld_col_base, ld_col_count;
  logic be_valid, be_explicit, ref_step, row_step, col_step, col_restart, row_c;
  arr_cmd_e be_cmd;
  row_sel_e be_row_sel;

  rtc_frontend #(
    .ROW_W(ROW_W), .COL_W(COL_W), .CFG_W(CFG_W), .REFI_CYCLES(REFI_CYCLES)
  ) u_frontend (
    .clk, .rst_n, .ld, .refr, .rtt, .rate_fsm, .cfg_valid, .cfg_data,
    .cfg_ready, .we, .rtc_en, .cke, .mc_cmd, .mc_row, .mc_col, .mc_ready,
    .link_cmd, .link_row, .link_col, .link_cfg_reg, .link_cfg_data,
    .link_exp_ref, .link_we, .link_ld, .link_cke,
    .active(fe_active), .cfg_busy, .slot_tick
  );

  dram_cmd_decoder #(.ROW_W(ROW_W), .COL_W(COL_W), .CFG_W(CFG_W)) u_decoder (
    .clk, .rst_n, .link_cmd, .link_row, .link_col, .link_cfg_reg, .link_cfg_data,
    .link_exp_ref, .link_we, .link_ld, .link_cke,
    .dec_act, .dec_rd, .dec_wr, .dec_pre, .dec_ref, .row_id, .col_id,
    .cfg_we, .cfg_reg, .cfg_data(d_cfg_data), .slot_valid, .slot_exp_ref,
    .slot_we, .ld(d_ld), .cke(d_cke)
  );

  rtc_backend u_backend (
    .clk, .rst_n, .cfg_we, .cfg_reg, .slot_valid, .slot_exp_ref, .slot_we,
    .ld(d_ld), .cke(d_cke),
    .ld_ref_start, .ld_ref_end, .ld_row_rate, .ld_row_base, .ld_row_count,
    .ld_col_rate, .ld_col_base, .ld_col_count,
    .row_c, .be_valid, .be_cmd, .be_row_sel, .be_explicit, .ref_step,
    .row_step, .col_step, .col_restart, .idle(be_idle)
  );

  rtc_bank #(
    .ROW_W(ROW_W), .COL_W(COL_W), .CFG_W(CFG_W), .SREF_CYCLES(REFI_CYCLES)
  ) u_bank (
    .clk, .rst_n, .cke(d_cke), .dec_act, .dec_rd, .dec_wr, .dec_pre, .dec_ref, .row_id,
    .col_id, .cfg_data(d_cfg_data),
    .ld_ref_start, .ld_ref_end, .ld_row_rate, .ld_row_base, .ld_row_count,
    .ld_col_rate, .ld_col_base, .ld_col_count,
    .be_valid, .be_cmd, .be_row_sel, .be_explicit, .ref_step, .row_step,
    .col_step, .col_restart, .row_c,
    .arr_cmd, .arr_row, .arr_col, .arr_rtt, .arr_explicit, .rd_valid(acc_rd_valid),
    .ref_row, .ref_start, .ref_end
  );

  assign acc_wr_take = arr_rtt && (arr_cmd == ARR_WR);

endmodule
