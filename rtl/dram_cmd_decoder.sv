// dram_cmd_decoder: DRAM command decoder with the full-RTC additions.
//
// It registers the command link from the memory controller and splits it into
// one-cycle strobes.  Conventional commands (ACT, RD, WR, PRE with the Row ID
// and Column ID, and REF) go to the bank address path unchanged; the paper's
// modification is that the decoder also recognises the RTC commands: CMD_CFG,
// a write of one in-DRAM RTC register (refresh range or AGU parameter), and
// CMD_SLOT, which hands the exp_ref decision of the memory controller (and
// the direction, we) to the RTC Backend Controller.  While cke is low the DRAM
// is in self-refresh and every command except CMD_CFG is ignored: the paper
// keeps CKE low while RTC is reconfigured, so configuration writes must get
// through then (accepting them with CKE high too is this design's choice).  ld and cke are passed on
// registered, aligned with the decoded commands.
//
// Timing: every output is valid one cycle after the command is on the link.
module dram_cmd_decoder
  import rtc_pkg::*;
#(
  parameter int unsigned ROW_W = 16,
  parameter int unsigned COL_W = 10,
  parameter int unsigned CFG_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  dram_cmd_e        link_cmd,
  input  logic [ROW_W-1:0] link_row,
  input  logic [COL_W-1:0] link_col,
  input  cfg_reg_e         link_cfg_reg,
  input  logic [CFG_W-1:0] link_cfg_data,
  input  logic             link_exp_ref,
  input  logic             link_we,
  input  logic             link_ld,
  input  logic             link_cke,
  // conventional commands
  output logic             dec_act,
  output logic             dec_rd,
  output logic             dec_wr,
  output logic             dec_pre,
  output logic             dec_ref,
  output logic [ROW_W-1:0] row_id,
  output logic [COL_W-1:0] col_id,
  // RTC commands
  output logic             cfg_we,
  output cfg_reg_e         cfg_reg,
  output logic [CFG_W-1:0] cfg_data,
  output logic             slot_valid,
  output logic             slot_exp_ref,
  output logic             slot_we,
  output logic             ld,
  output logic             cke
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dec_act      <= 1'b0;
      dec_rd       <= 1'b0;
      dec_wr       <= 1'b0;
      dec_pre      <= 1'b0;
      dec_ref      <= 1'b0;
      row_id       <= '0;
      col_id       <= '0;
      cfg_we       <= 1'b0;
      cfg_reg      <= CFG_REF_START;
      cfg_data     <= '0;
      slot_valid   <= 1'b0;
      slot_exp_ref <= 1'b0;
      slot_we      <= 1'b0;
      ld           <= 1'b1;
      cke          <= 1'b0;
    end else begin
      dec_act    <= link_cke && (link_cmd == CMD_ACT);
      dec_rd     <= link_cke && (link_cmd == CMD_RD);
      dec_wr     <= link_cke && (link_cmd == CMD_WR);
      dec_pre    <= link_cke && (link_cmd == CMD_PRE);
      dec_ref    <= link_cke && (link_cmd == CMD_REF);
      cfg_we     <= (link_cmd == CMD_CFG);   // accepted also with cke low
      slot_valid <= link_cke && (link_cmd == CMD_SLOT);
      ld         <= link_ld;
      cke        <= link_cke;
      if (link_cmd == CMD_ACT) row_id <= link_row;
      if (link_cmd == CMD_RD || link_cmd == CMD_WR) col_id <= link_col;
      if (link_cmd == CMD_CFG) begin
        cfg_reg  <= link_cfg_reg;
        cfg_data <= link_cfg_data;
      end
      if (link_cmd == CMD_SLOT) begin
        slot_exp_ref <= link_exp_ref;
        slot_we      <= link_we;
      end
    end
  end

endmodule
