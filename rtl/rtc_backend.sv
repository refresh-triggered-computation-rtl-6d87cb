// rtc_backend: RTC Backend Controller, the in-DRAM controller of full-RTC.
//
// Configuration: CMD_CFG writes decoded by the command decoder are turned into
// load strobes for the Configurable Refresh Counter (start, end row) and for
// the Row and Column AGUs (rate, base, count), all in rtc_bank.
//
// Operation follows the paper's full-RTC state machine:
//   Idle  --cke=1, ld=0 (and a slot command)--> Act
//   Act   --exp_ref=1--> Pre   explicit refresh: the refresh counter row is
//                              activated, then precharged in Pre
//   Act   --exp_ref=0, we=1--> Write,  --exp_ref=0, we=0--> Read
//                              implicit refresh: the Row AGU row is activated
//   Write/Read  stay while RowC=0 (one column per cycle from the Column AGU)
//                --RowC=1--> Pre      (RowC is the Column AGU's last column)
//   Pre   --ld=1--> Idle,  --ld=0 and next slot--> Act
// Waiting for a slot command in Idle and in Pre, and issuing PRE only in the
// first cycle spent in Pre, are this design's additions: the paper's diagram
// does not say what paces Act, and here the memory controller's slot command
// (one per refresh interval) does.  In Pre the refresh counter advances after
// an explicit refresh and the Row AGU after an implicit one.
//
// Timing: a slot takes 1 (Act) + columns (Read/Write) + 1 (Pre) cycles.  The
// memory controller must not send the next slot before that; an assertion
// checks it.  be_valid is high in each cycle the backend drives the bank
// array; in the other cycles conventional commands may use it.
module rtc_backend
  import rtc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // from the command decoder
  input  logic       cfg_we,
  input  cfg_reg_e   cfg_reg,
  input  logic       slot_valid,
  input  logic       slot_exp_ref,
  input  logic       slot_we,
  input  logic       ld,
  input  logic       cke,
  // configuration strobes to the bank
  output logic       ld_ref_start,
  output logic       ld_ref_end,
  output logic       ld_row_rate,
  output logic       ld_row_base,
  output logic       ld_row_count,
  output logic       ld_col_rate,
  output logic       ld_col_base,
  output logic       ld_col_count,
  // control of the bank address path
  input  logic       row_c,          // RowC: Column AGU at its last column
  output logic       be_valid,
  output arr_cmd_e   be_cmd,
  output row_sel_e   be_row_sel,
  output logic       be_explicit,    // the ACT issued is an explicit refresh
  output logic       ref_step,
  output logic       row_step,
  output logic       col_step,
  output logic       col_restart,
  // status
  output logic       idle
);

  typedef enum logic [2:0] {BE_IDLE, BE_ACT, BE_READ, BE_WRITE, BE_PRE} be_state_e;
  be_state_e state;
  logic exp_ref_q, we_q, pre_first;

  assign idle = (state == BE_IDLE);

  // configuration register decode
  always_comb begin
    ld_ref_start = cfg_we && cfg_reg == CFG_REF_START;
    ld_ref_end   = cfg_we && cfg_reg == CFG_REF_END;
    ld_row_rate  = cfg_we && cfg_reg == CFG_ROW_RATE;
    ld_row_base  = cfg_we && cfg_reg == CFG_ROW_BASE;
    ld_row_count = cfg_we && cfg_reg == CFG_ROW_COUNT;
    ld_col_rate  = cfg_we && cfg_reg == CFG_COL_RATE;
    ld_col_base  = cfg_we && cfg_reg == CFG_COL_BASE;
    ld_col_count = cfg_we && cfg_reg == CFG_COL_COUNT;
  end

  // commands to the bank array
  always_comb begin
    be_valid    = 1'b0;
    be_cmd      = ARR_NOP;
    be_row_sel  = ROWSEL_AGU;
    be_explicit = 1'b0;
    ref_step    = 1'b0;
    row_step    = 1'b0;
    col_step    = 1'b0;
    col_restart = 1'b0;
    unique case (state)
      BE_ACT: begin
        be_valid    = 1'b1;
        be_cmd      = ARR_ACT;
        be_row_sel  = exp_ref_q ? ROWSEL_REFCNT : ROWSEL_AGU;
        be_explicit = exp_ref_q;
        col_restart = 1'b1;
      end
      BE_READ, BE_WRITE: begin
        be_valid = 1'b1;
        be_cmd   = (state == BE_WRITE) ? ARR_WR : ARR_RD;
        col_step = 1'b1;
      end
      BE_PRE: if (pre_first) begin
        be_valid = 1'b1;
        be_cmd   = ARR_PRE;
        ref_step = exp_ref_q;
        row_step = !exp_ref_q;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= BE_IDLE;
      exp_ref_q <= 1'b0;
      we_q      <= 1'b0;
      pre_first <= 1'b0;
    end else begin
      pre_first <= 1'b0;
      unique case (state)
        BE_IDLE: if (cke && !ld && slot_valid) begin
          state     <= BE_ACT;
          exp_ref_q <= slot_exp_ref;
          we_q      <= slot_we;
        end
        BE_ACT: begin
          if (exp_ref_q) begin
            state     <= BE_PRE;
            pre_first <= 1'b1;
          end else begin
            state <= we_q ? BE_WRITE : BE_READ;
          end
        end
        BE_READ, BE_WRITE: if (row_c) begin
          state     <= BE_PRE;
          pre_first <= 1'b1;
        end
        BE_PRE: begin
          if (ld) begin
            state <= BE_IDLE;
          end else if (cke && slot_valid) begin
            state     <= BE_ACT;
            exp_ref_q <= slot_exp_ref;
            we_q      <= slot_we;
          end
        end
        default: state <= BE_IDLE;
      endcase
    end
  end

  // A slot may only arrive while no slot is in progress.
  a_no_slot_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    slot_valid |-> (state == BE_IDLE || state == BE_PRE));

endmodule
