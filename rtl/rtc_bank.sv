// rtc_bank: the RTC address path inside one DRAM bank (the bank box of the
// paper's full-RTC figure).
//
// It holds the Configurable Refresh Counter, the Row AGU and the Column AGU,
// and the two address multiplexers in front of the bank's row and column
// decoders.  The Row Address MUX selects the Row ID of a conventional ACT, the
// Row AGU row for an RTT access, or the refresh counter row for a refresh
// (conventional REF or RTT explicit refresh).  The Column Address MUX selects
// the Column ID of a conventional RD/WR or the Column AGU column for RTT.
// Whenever the backend drives the bank (be_valid) it wins; otherwise the
// decoded conventional command is issued.  The refresh counter advances after
// every refresh, whichever path issued it.
//
// Self-refresh: while cke is low the DRAM refreshes itself.  A timer then
// issues a REF of the refresh counter row every SREF_CYCLES cycles, so in
// self-refresh, too, only the configured start..end range is refreshed (the
// paper notes that PAAR keeps saving energy in self-refresh mode).  A real
// DRAM runs this timer from an internal oscillator; here it uses clk, and its
// period is this design's assumption.
//
// Timing: the array command and address are combinational from the inputs;
// rd_valid marks, one cycle after an RD, the cycle in which the array's read
// data is expected (a one-cycle read latency is this design's assumption).
module rtc_bank
  import rtc_pkg::*;
#(
  parameter int unsigned ROW_W = 16,
  parameter int unsigned COL_W = 10,
  parameter int unsigned CFG_W = 32,
  parameter int unsigned SREF_CYCLES = 195
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cke,
  // conventional commands from the decoder
  input  logic             dec_act,
  input  logic             dec_rd,
  input  logic             dec_wr,
  input  logic             dec_pre,
  input  logic             dec_ref,
  input  logic [ROW_W-1:0] row_id,
  input  logic [COL_W-1:0] col_id,
  // configuration from the backend
  input  logic [CFG_W-1:0] cfg_data,
  input  logic             ld_ref_start,
  input  logic             ld_ref_end,
  input  logic             ld_row_rate,
  input  logic             ld_row_base,
  input  logic             ld_row_count,
  input  logic             ld_col_rate,
  input  logic             ld_col_base,
  input  logic             ld_col_count,
  // RTT control from the backend
  input  logic             be_valid,
  input  arr_cmd_e         be_cmd,
  input  row_sel_e         be_row_sel,
  input  logic             be_explicit,
  input  logic             ref_step,
  input  logic             row_step,
  input  logic             col_step,
  input  logic             col_restart,
  output logic             row_c,
  // bank array
  output arr_cmd_e         arr_cmd,
  output logic [ROW_W-1:0] arr_row,
  output logic [COL_W-1:0] arr_col,
  output logic             arr_rtt,       // command comes from RTT
  output logic             arr_explicit,  // ACT is an RTT explicit refresh
  output logic             rd_valid,
  // status
  output logic [ROW_W-1:0] ref_row,
  output logic [ROW_W-1:0] ref_start,
  output logic [ROW_W-1:0] ref_end
);

  logic [ROW_W-1:0] agu_row;
  logic [COL_W-1:0] agu_col;
  row_sel_e         row_sel;
  logic             conv_ref;

  logic [$clog2(SREF_CYCLES)-1:0] sref_cnt;
  logic             self_ref;

  // self-refresh timer
  assign self_ref = !cke && !be_valid &&
                    (sref_cnt == ($clog2(SREF_CYCLES))'(SREF_CYCLES - 1));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  sref_cnt <= '0;
    else if (cke || self_ref)    sref_cnt <= '0;
    else if (sref_cnt != ($clog2(SREF_CYCLES))'(SREF_CYCLES - 1))
                                 sref_cnt <= sref_cnt + 1'b1;
  end

  assign conv_ref = !be_valid && (dec_ref || self_ref);

  refresh_counter #(.ROW_W(ROW_W)) u_refresh_counter (
    .clk        (clk),
    .rst_n      (rst_n),
    .load_start (ld_ref_start),
    .load_end   (ld_ref_end),
    .cfg_row    (cfg_data[ROW_W-1:0]),
    .step       (ref_step || conv_ref),
    .row        (ref_row),
    .start_row  (ref_start),
    .end_row    (ref_end),
    .wrap       ()
  );

  agu #(.ADDR_W(ROW_W)) u_row_agu (
    .clk        (clk),
    .rst_n      (rst_n),
    .load_rate  (ld_row_rate),
    .load_base  (ld_row_base),
    .load_count (ld_row_count),
    .cfg_data   (cfg_data[ROW_W:0]),
    .restart    (1'b0),
    .step       (row_step),
    .addr       (agu_row),
    .last       ()
  );

  agu #(.ADDR_W(COL_W)) u_col_agu (
    .clk        (clk),
    .rst_n      (rst_n),
    .load_rate  (ld_col_rate),
    .load_base  (ld_col_base),
    .load_count (ld_col_count),
    .cfg_data   (cfg_data[COL_W:0]),
    .restart    (col_restart),
    .step       (col_step),
    .addr       (agu_col),
    .last       (row_c)
  );

  // command arbitration and row select
  always_comb begin
    arr_cmd      = ARR_NOP;
    row_sel      = ROWSEL_ID;
    arr_rtt      = be_valid;
    arr_explicit = be_valid && be_explicit;
    arr_col      = col_id;
    if (be_valid) begin
      arr_cmd = be_cmd;
      row_sel = be_row_sel;
      arr_col = agu_col;
    end else if (dec_ref || self_ref) begin
      arr_cmd = ARR_REF;
      row_sel = ROWSEL_REFCNT;
    end else if (dec_act) arr_cmd = ARR_ACT;
    else if (dec_rd)      arr_cmd = ARR_RD;
    else if (dec_wr)      arr_cmd = ARR_WR;
    else if (dec_pre)     arr_cmd = ARR_PRE;
  end

  // Row Address MUX
  always_comb begin
    unique case (row_sel)
      ROWSEL_AGU:    arr_row = agu_row;
      ROWSEL_REFCNT: arr_row = ref_row;
      default:       arr_row = row_id;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= (arr_cmd == ARR_RD);
  end

endmodule
