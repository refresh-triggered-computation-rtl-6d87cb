// dram_array_model: behavioural model of one DRAM bank array (cells, row
// decoder, row buffer, column decoder) for the testbenches.  Not
// synthesizable and not part of the design.
//
// It keeps, for every row, the cycle at which its charge was last restored
// (by an ACT or a REF) and how often it was touched.  A row marked as holding
// data (mark_alloc, undone by free_all) must be restored at least every RETENTION cycles: each
// touch, and a final sweep (check_all), counts a retention violation if it
// was not.  It also checks the command protocol (ACT only on a closed bank,
// RD/WR only on an open row, REF only on a closed bank), stores written data
// per (row, column) and returns it one cycle after RD.
module dram_array_model
  import rtc_pkg::*;
#(
  parameter int unsigned ROW_W     = 16,
  parameter int unsigned COL_W     = 10,
  parameter int unsigned DATA_W    = 32,
  parameter longint      RETENTION = 64'd1000
) (
  input  logic              clk,
  input  arr_cmd_e          arr_cmd,
  input  logic [ROW_W-1:0]  arr_row,
  input  logic [COL_W-1:0]  arr_col,
  input  logic [DATA_W-1:0] wdata,
  output logic [DATA_W-1:0] rdata
);
  localparam int unsigned ROWS = 1 << ROW_W;

  longint now = 0;
  longint last_restore [ROWS];
  int     touches [ROWS];
  bit     alloc [ROWS];
  logic [DATA_W-1:0] store [logic [ROW_W+COL_W-1:0]];
  bit     open_q = 0;
  logic [ROW_W-1:0] open_row;
  int     violations = 0, protocol_errors = 0;
  int     n_act = 0, n_ref = 0, n_rd = 0, n_wr = 0, n_pre = 0;

  function automatic void mark_alloc(int lo, int hi);
    for (int r = lo; r <= hi; r++) begin
      alloc[r] = 1;
      last_restore[r] = now;
    end
  endfunction

  function automatic void free_all();
    for (int r = 0; r < ROWS; r++) alloc[r] = 0;
  endfunction

  function automatic void clear_touches();
    for (int r = 0; r < ROWS; r++) touches[r] = 0;
  endfunction

  function automatic void restore(int r);
    if (alloc[r] && now - last_restore[r] > RETENTION) begin
      violations++;
      $display("RETENTION: row %0d restored after %0d cycles", r, now - last_restore[r]);
    end
    last_restore[r] = now;
    touches[r]++;
  endfunction

  function automatic void protocol_error(string what);
    protocol_errors++;
    if (protocol_errors < 10) $display("PROTOCOL: %s at cycle %0d (row %0d)", what, now, arr_row);
  endfunction

  function automatic void check_all();
    for (int r = 0; r < ROWS; r++)
      if (alloc[r] && now - last_restore[r] > RETENTION) begin
        violations++;
        $display("RETENTION: row %0d not restored for %0d cycles", r, now - last_restore[r]);
      end
  endfunction

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      last_restore[r] = 0; touches[r] = 0; alloc[r] = 0;
    end
  end

  always @(posedge clk) begin
    now++;
    unique case (arr_cmd)
      ARR_ACT: begin
        n_act++;
        if (open_q) protocol_error("command on an open bank");
        open_q = 1; open_row = arr_row;
        restore(int'(arr_row));
      end
      ARR_REF: begin
        n_ref++;
        if (open_q) protocol_error("command on an open bank");
        restore(int'(arr_row));
      end
      ARR_RD: begin
        n_rd++;
        if (!open_q) protocol_error("column command on a closed bank");
        rdata <= store.exists({open_row, arr_col}) ? store[{open_row, arr_col}] : '0;
      end
      ARR_WR: begin
        n_wr++;
        if (!open_q) protocol_error("column command on a closed bank");
        store[{open_row, arr_col}] = wdata;
      end
      ARR_PRE: begin
        n_pre++;
        open_q = 0;
      end
      default: ;
    endcase
  end
endmodule
