// rtt_checker: testbench scoreboard for rtc_top.  It watches the bank array
// commands and predicts them independently of the RTL: a software copy of the
// paper's Algorithm 1 decides for every RTT activation whether it must be an
// explicit refresh; an explicit refresh must hit the next row of the refresh
// range start..end, an implicit one the next row of the affine pattern
// base + i*rate (i < count), followed by `col_count` RD or WR commands at
// columns col_base + j*col_rate and a PRE.  Conventional REFs must hit the
// next refresh range row.  The sync_* inputs tell it that the matching part
// was reconfigured (or, for sync_rate, that Active was entered).
module rtt_checker
  import rtc_pkg::*;
#(
  parameter int unsigned ROW_W = 16,
  parameter int unsigned COL_W = 10
) (
  input  logic             clk,
  input  logic             enable,
  input  arr_cmd_e         arr_cmd,
  input  logic [ROW_W-1:0] arr_row,
  input  logic [COL_W-1:0] arr_col,
  input  logic             arr_rtt,
  input  logic             arr_explicit,
  input  logic             sync_ref,
  input  logic             sync_agu,
  input  logic             sync_rate,
  input  longint           nr,
  input  longint           na,
  input  longint           ref_start,
  input  longint           ref_end,
  input  longint           row_base,
  input  longint           row_rate,
  input  longint           row_count,
  input  longint           col_base,
  input  longint           col_rate,
  input  longint           col_count
);
  int checks = 0, failures = 0;
  int n_explicit = 0, n_impl_rd = 0, n_impl_wr = 0, n_conv_ref = 0, n_slots = 0;
  longint credit, slot_i, period, ref_ptr, row_i, col_j;
  bit cur_explicit;

  function automatic longint gcd(longint a, longint b);
    while (b != 0) begin longint t = a % b; a = b; b = t; end
    return a;
  endfunction

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endfunction

  // next decision of Algorithm 1
  function automatic bit next_exp_ref();
    bit e;
    if (nr <= na) return 0;
    if (credit > nr - na) begin e = 0; credit -= nr - na; end
    else begin e = 1; credit += na; end
    slot_i++;
    if (slot_i == period) begin slot_i = 0; credit = nr; end
    return e;
  endfunction

  always @(posedge clk) begin
    if (sync_ref) ref_ptr = ref_start;
    if (sync_agu) row_i = 0;
    if (sync_rate) begin
      credit = nr; slot_i = 0;
      period = (nr <= na) ? 1 : nr / gcd(nr, na);
    end
    if (enable) begin
      if (arr_rtt && arr_cmd == ARR_ACT) begin
        bit e;
        e = next_exp_ref();
        n_slots++;
        cur_explicit = e;
        col_j = 0;
        check(arr_explicit == e, $sformatf("slot %0d: explicit=%0d expected %0d", n_slots, arr_explicit, e));
        if (e) begin
          n_explicit++;
          check(arr_row == ROW_W'(ref_ptr), $sformatf("explicit refresh row %0d expected %0d", arr_row, ref_ptr));
          ref_ptr = (ref_ptr == ref_end) ? ref_start : ref_ptr + 1;
        end else begin
          longint exp_row;
          exp_row = (row_base + row_i * row_rate) % (longint'(1) << ROW_W);
          check(arr_row == ROW_W'(exp_row), $sformatf("access row %0d expected %0d", arr_row, exp_row));
        end
      end
      if (arr_rtt && (arr_cmd == ARR_RD || arr_cmd == ARR_WR)) begin
        longint exp_col;
        exp_col = (col_base + col_j * col_rate) % (longint'(1) << COL_W);
        check(!cur_explicit, "no column command in an explicit refresh");
        check(arr_col == COL_W'(exp_col), $sformatf("column %0d expected %0d", arr_col, exp_col));
        col_j++;
        if (arr_cmd == ARR_RD) n_impl_rd++; else n_impl_wr++;
      end
      if (arr_rtt && arr_cmd == ARR_PRE) begin
        if (!cur_explicit) begin
          check(col_j == col_count, $sformatf("%0d columns in a row, expected %0d", col_j, col_count));
          row_i = (row_i + 1 == row_count) ? 0 : row_i + 1;
        end
      end
      if (!arr_rtt && arr_cmd == ARR_REF) begin
        n_conv_ref++;
        check(arr_row == ROW_W'(ref_ptr), $sformatf("conventional REF row %0d expected %0d", arr_row, ref_ptr));
        ref_ptr = (ref_ptr == ref_end) ? ref_start : ref_ptr + 1;
      end
    end
  end
endmodule
