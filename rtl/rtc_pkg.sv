// rtc_pkg: types and constants shared by the Refresh Triggered Computation
// (RTC) blocks.
//
// The memory controller side (rtc_frontend) and the DRAM side
// (dram_cmd_decoder, rtc_backend, rtc_bank) talk over a command link that
// carries the usual DRAM commands (ACT, RD, WR, PRE, REF) plus two RTC
// commands: a configuration write (CFG) that loads one register of the
// in-DRAM RTC logic, and a slot command (SLOT) that starts one refresh
// slot of Refresh Triggered Transfer and carries the exp_ref decision.
// The encodings and the register map below are this design's own choice;
// the paper only says that "special commands" configure the AGU.
package rtc_pkg;

  // Commands on the memory-controller-to-DRAM link.
  typedef enum logic [2:0] {
    CMD_NOP  = 3'd0,
    CMD_ACT  = 3'd1,
    CMD_RD   = 3'd2,
    CMD_WR   = 3'd3,
    CMD_PRE  = 3'd4,
    CMD_REF  = 3'd5,   // conventional auto-refresh of the refresh counter row
    CMD_CFG  = 3'd6,   // RTC configuration register write
    CMD_SLOT = 3'd7    // one RTT refresh slot, carries exp_ref and we
  } dram_cmd_e;

  // In-DRAM RTC configuration registers written with CMD_CFG.
  typedef enum logic [3:0] {
    CFG_REF_START = 4'd0,  // Configurable Refresh Counter: first row
    CFG_REF_END   = 4'd1,  // Configurable Refresh Counter: last row
    CFG_ROW_RATE  = 4'd2,  // Row AGU step ("Load rate" of Fig 7)
    CFG_ROW_BASE  = 4'd3,  // Row AGU first row
    CFG_ROW_COUNT = 4'd4,  // Row AGU number of rows in the pattern
    CFG_COL_RATE  = 4'd5,  // Column AGU step
    CFG_COL_BASE  = 4'd6,  // Column AGU first column
    CFG_COL_COUNT = 4'd7   // Column AGU columns per row
  } cfg_reg_e;

  // Number of AGU words after "Load rate" (the "Load other parameters"
  // state of Fig 7): ROW_BASE, ROW_COUNT, COL_RATE, COL_BASE, COL_COUNT.
  localparam int unsigned AGU_OTHER_WORDS = 5;

  // Commands issued to one DRAM bank array.
  typedef enum logic [2:0] {
    ARR_NOP = 3'd0,
    ARR_ACT = 3'd1,   // open (and thereby restore) a row
    ARR_RD  = 3'd2,
    ARR_WR  = 3'd3,
    ARR_PRE = 3'd4,
    ARR_REF = 3'd5    // refresh one row (activate + precharge)
  } arr_cmd_e;

  // Row address multiplexer select (Fig 6 Row Address MUX inputs).
  typedef enum logic [1:0] {
    ROWSEL_ID     = 2'd0,  // Row ID from the command decoder
    ROWSEL_AGU    = 2'd1,  // Row AGU
    ROWSEL_REFCNT = 2'd2   // Configurable Refresh Counter
  } row_sel_e;

endpackage
