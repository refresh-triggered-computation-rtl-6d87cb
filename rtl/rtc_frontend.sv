// rtc_frontend: RTC Frontend Controller, the part of full-RTC that sits in the
// memory controller.
//
// It runs the reconfiguration state machine of the paper: from Idle, ld=1
// together with refr, rtt or rate_fsm enters one of three load sequences
//   refr     : Load refresh start -> Load refresh end          -> Idle
//   rtt      : Load rate -> Load other parameters (5 words)    -> Idle
//   rate_fsm : Load N_r -> Load N_a                            -> Idle
// and ld=0 enters Active, where Refresh Triggered Transfer runs; ld=1 in
// Active returns to Idle.  Refresh counter and AGU words are forwarded to the
// DRAM as CMD_CFG commands; N_r and N_a stay here, in the rate_matcher that
// executes the paper's Algorithm 1.
//
// A slot timer ticks once per row refresh interval, REFI_CYCLES.  A real
// chip gets one REF every 7.8 us and refreshes a batch of rows with it; here
// every slot covers one row, so the same refresh rate is spread out: the
// whole bank (65,536 rows) in the 64 ms retention time is one row every
// 0.977 us, 195 cycles at 200 MHz (the default).  At each tick, if the
// controller is Active, RTC is enabled (rtc_en) and the rate matcher is
// ready, it sends CMD_SLOT with the rate matcher's exp_ref and the
// application's we, and advances the rate matcher.  Otherwise it sends a conventional CMD_REF, so refresh never stops
// while RTC is disabled (e.g. for an application with irregular accesses) or
// being reconfigured.  With cke low the DRAM refreshes itself and no slot or
// REF is sent.  A slot must finish within one interval, so the Column AGU
// count may be at most REFI_CYCLES - 4 (an assertion in the backend checks
// that slots do not overlap).
//
// The address and configuration fields of the link are zero unless the
// command in that cycle uses them.
//
// Link arbitration (this design's choice): a due slot/REF goes first, then a
// configuration word, then the conventional command of the base memory
// controller (mc_*).  cfg_ready and mc_ready say when a word or command is
// taken.  The base controller is held off while RTT owns the bank: in Active,
// and for SLOT_GUARD cycles after each slot (long enough for a slot with the
// configured number of columns to finish in the DRAM).
module rtc_frontend
  import rtc_pkg::*;
#(
  parameter int unsigned ROW_W       = 16,
  parameter int unsigned COL_W       = 10,
  parameter int unsigned CNT_W       = ROW_W + 1,
  parameter int unsigned CFG_W       = 32,
  parameter int unsigned REFI_CYCLES = 195
) (
  input  logic             clk,
  input  logic             rst_n,
  // application / host configuration (paper's ld, refr, rtt, rate_fsm)
  input  logic             ld,
  input  logic             refr,
  input  logic             rtt,
  input  logic             rate_fsm,
  input  logic             cfg_valid,
  input  logic [CFG_W-1:0] cfg_data,
  output logic             cfg_ready,
  input  logic             we,        // RTT accesses are writes (1) or reads (0)
  input  logic             rtc_en,    // 0: RTC bypassed, conventional refresh
  input  logic             cke,       // clock enable to the DRAM
  // conventional command stream of the base memory controller
  input  dram_cmd_e        mc_cmd,
  input  logic [ROW_W-1:0] mc_row,
  input  logic [COL_W-1:0] mc_col,
  output logic             mc_ready,
  // command link to the DRAM
  output dram_cmd_e        link_cmd,
  output logic [ROW_W-1:0] link_row,
  output logic [COL_W-1:0] link_col,
  output cfg_reg_e         link_cfg_reg,
  output logic [CFG_W-1:0] link_cfg_data,
  output logic             link_exp_ref,
  output logic             link_we,
  output logic             link_ld,
  output logic             link_cke,
  // status
  output logic             active,     // in the Active state
  output logic             cfg_busy,   // rate matcher still computing P
  output logic             slot_tick   // a refresh interval elapsed this cycle
);

  typedef enum logic [2:0] {
    FE_IDLE, FE_LD_REF_START, FE_LD_REF_END, FE_LD_RATE, FE_LD_OTHER,
    FE_LD_NR, FE_LD_NA, FE_ACTIVE
  } fe_state_e;

  fe_state_e state;
  logic [$clog2(REFI_CYCLES)-1:0] refi_cnt;
  logic       pending;             // a slot/REF is due and not yet sent
  logic [2:0] other_idx;           // word index in Load other parameters
  logic [COL_W:0] col_count;       // copy of the forwarded column count
  logic [COL_W+3:0] guard;         // cycles left of the last slot
  logic       rm_exp_ref, rm_ready, rm_step, rm_restart;
  logic       load_nr, load_na;
  logic       send_slot;           // pending and the slot goes out as SLOT
  logic       cfg_take;            // a configuration word is taken this cycle
  logic       cfg_fwd;             // ... and forwarded to the DRAM
  cfg_reg_e   cfg_reg;
  logic [CNT_W-1:0] unused_p, unused_nr, unused_na;

  assign active    = (state == FE_ACTIVE);
  assign cfg_busy  = !rm_ready;
  assign slot_tick = cke && (refi_cnt == ($clog2(REFI_CYCLES))'(REFI_CYCLES - 1));
  assign send_slot = pending && active && rtc_en && rm_ready && !ld;

  // Configuration words are accepted in the load states when no slot is due.
  always_comb begin
    cfg_ready = 1'b0;
    cfg_reg   = CFG_REF_START;
    cfg_fwd   = 1'b0;
    load_nr   = 1'b0;
    load_na   = 1'b0;
    unique case (state)
      FE_LD_REF_START: begin cfg_ready = !pending; cfg_reg = CFG_REF_START; cfg_fwd = 1'b1; end
      FE_LD_REF_END:   begin cfg_ready = !pending; cfg_reg = CFG_REF_END;   cfg_fwd = 1'b1; end
      FE_LD_RATE:      begin cfg_ready = !pending; cfg_reg = CFG_ROW_RATE;  cfg_fwd = 1'b1; end
      FE_LD_OTHER:     begin cfg_ready = !pending;
                             cfg_reg = cfg_reg_e'(4'(CFG_ROW_BASE) + 4'(other_idx));
                             cfg_fwd = 1'b1; end
      FE_LD_NR:        begin cfg_ready = rm_ready; end
      FE_LD_NA:        begin cfg_ready = rm_ready; end
      default: ;
    endcase
    cfg_take = cfg_ready && cfg_valid;
    if (cfg_take && state == FE_LD_NR) load_nr = 1'b1;
    if (cfg_take && state == FE_LD_NA) load_na = 1'b1;
  end

  assign rm_step    = send_slot;
  assign rm_restart = (state == FE_IDLE) && !ld;

  rate_matcher #(.CNT_W(CNT_W)) u_rate_matcher (
    .clk      (clk),
    .rst_n    (rst_n),
    .load_nr  (load_nr),
    .load_na  (load_na),
    .cfg_data (cfg_data[CNT_W-1:0]),
    .restart  (rm_restart),
    .step     (rm_step),
    .exp_ref  (rm_exp_ref),
    .ready    (rm_ready),
    .period_p (unused_p),
    .n_r      (unused_nr),
    .n_a      (unused_na)
  );

  // Link driver.
  always_comb begin
    link_cmd      = CMD_NOP;
    link_row      = '0;
    link_col      = '0;
    link_cfg_reg  = CFG_REF_START;
    link_cfg_data = '0;
    link_exp_ref  = 1'b0;
    link_we       = we;
    link_ld       = ld || !active;
    link_cke      = cke;
    mc_ready      = 1'b0;
    if (pending) begin
      if (send_slot) begin
        link_cmd     = CMD_SLOT;
        link_exp_ref = rm_exp_ref;
      end else begin
        link_cmd     = CMD_REF;
      end
    end else if (cfg_take && cfg_fwd) begin
      link_cmd      = CMD_CFG;
      link_cfg_reg  = cfg_reg;
      link_cfg_data = cfg_data;
    end else if (!active && guard == '0 && cke && !cfg_ready) begin
      mc_ready = 1'b1;
      link_cmd = mc_cmd;
      link_row = mc_row;
      link_col = mc_col;
      // the base controller may not use the RTC commands
      if (mc_cmd == CMD_CFG || mc_cmd == CMD_SLOT) link_cmd = CMD_NOP;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= FE_IDLE;
      refi_cnt  <= '0;
      pending   <= 1'b0;
      other_idx <= '0;
      col_count <= (COL_W+1)'(1);
      guard     <= '0;
    end else begin
      // refresh interval timer; stopped while the DRAM self-refreshes
      if (!cke) begin
        refi_cnt <= '0;
        pending  <= 1'b0;
      end else begin
        refi_cnt <= slot_tick ? '0 : refi_cnt + 1'b1;
        if (slot_tick) pending <= 1'b1;
        else if (pending) pending <= 1'b0;   // sent this cycle
      end
      if (send_slot) guard <= (COL_W+4)'(col_count) + (COL_W+4)'(4);
      else if (guard != '0) guard <= guard - 1'b1;

      if (cfg_take && cfg_fwd && cfg_reg == CFG_COL_COUNT)
        col_count <= cfg_data[COL_W:0];

      unique case (state)
        FE_IDLE: begin
          if (!ld)           state <= FE_ACTIVE;
          else if (refr)     state <= FE_LD_REF_START;
          else if (rtt)      state <= FE_LD_RATE;
          else if (rate_fsm) state <= FE_LD_NR;
        end
        FE_LD_REF_START: if (cfg_take) state <= FE_LD_REF_END;
        FE_LD_REF_END:   if (cfg_take) state <= FE_IDLE;
        FE_LD_RATE: if (cfg_take) begin
          state     <= FE_LD_OTHER;
          other_idx <= '0;
        end
        FE_LD_OTHER: if (cfg_take) begin
          if (other_idx == 3'(AGU_OTHER_WORDS - 1)) state <= FE_IDLE;
          other_idx <= other_idx + 1'b1;
        end
        FE_LD_NR:  if (cfg_take) state <= FE_LD_NA;
        FE_LD_NA:  if (cfg_take) state <= FE_IDLE;
        FE_ACTIVE: if (ld) state <= FE_IDLE;
        default:   state <= FE_IDLE;
      endcase
    end
  end

endmodule
