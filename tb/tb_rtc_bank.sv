// tb_rtc_bank: checks the bank address path: conventional ACT/RD/WR/PRE use
// the decoder's Row ID / Column ID, REF uses and advances the configurable
// refresh counter inside its start..end range, RTT accesses take the Row AGU
// row and Column AGU columns (with RowC on the last column), explicit
// refreshes take the refresh counter row, the backend wins over a
// simultaneous conventional command, rd_valid follows RD by one cycle, and
// with cke low the self-refresh timer refreshes the range every SREF_CYCLES.
// A last part draws random ranges, AGU patterns and slot sequences and
// compares every row and column with a software model.
module tb_rtc_bank;
  import rtc_pkg::*;
  localparam int unsigned ROW_W = 6, COL_W = 4, CFG_W = 16;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  logic cke = 1;
  logic dec_act = 0, dec_rd = 0, dec_wr = 0, dec_pre = 0, dec_ref = 0;
  logic [ROW_W-1:0] row_id = '0;
  logic [COL_W-1:0] col_id = '0;
  logic [CFG_W-1:0] cfg_data = '0;
  logic ld_ref_start = 0, ld_ref_end = 0, ld_row_rate = 0, ld_row_base = 0, ld_row_count = 0;
  logic ld_col_rate = 0, ld_col_base = 0, ld_col_count = 0;
  logic be_valid = 0, be_explicit = 0, ref_step = 0, row_step = 0, col_step = 0, col_restart = 0;
  arr_cmd_e be_cmd = ARR_NOP;
  row_sel_e be_row_sel = ROWSEL_AGU;
  logic row_c, arr_rtt, arr_explicit, rd_valid;
  arr_cmd_e arr_cmd;
  logic [ROW_W-1:0] arr_row, ref_row, ref_start, ref_end;
  logic [COL_W-1:0] arr_col;
  int checks = 0, failures = 0;

  rtc_bank #(.ROW_W(ROW_W), .COL_W(COL_W), .CFG_W(CFG_W), .SREF_CYCLES(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic clear();
    {dec_act, dec_rd, dec_wr, dec_pre, dec_ref} = '0;
    {ld_ref_start, ld_ref_end, ld_row_rate, ld_row_base, ld_row_count} = '0;
    {ld_col_rate, ld_col_base, ld_col_count} = '0;
    {be_valid, be_explicit, ref_step, row_step, col_step, col_restart} = '0;
    be_cmd = ARR_NOP;
  endtask

  task automatic conv_ref(int exp_row);
    dec_ref = 1; #1;
    check(arr_cmd == ARR_REF && arr_row == ROW_W'(exp_row) && !arr_rtt,
          $sformatf("REF row %0d expected %0d", arr_row, exp_row));
    @(negedge clk); clear();
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // conventional path
    row_id = 6'd33; dec_act = 1; #1;
    check(arr_cmd == ARR_ACT && arr_row == 6'd33 && !arr_rtt, "conventional ACT");
    @(negedge clk); clear();
    col_id = 4'd9; dec_rd = 1; #1;
    check(arr_cmd == ARR_RD && arr_col == 4'd9, "conventional RD");
    @(negedge clk); clear(); #1;
    check(rd_valid, "rd_valid one cycle after RD");
    dec_wr = 1; #1; check(arr_cmd == ARR_WR && arr_col == 4'd9, "conventional WR");
    @(negedge clk); clear(); #1;
    check(!rd_valid, "no rd_valid after WR");
    dec_pre = 1; #1; check(arr_cmd == ARR_PRE, "conventional PRE");
    @(negedge clk); clear();
    // refresh counter: full range after reset
    conv_ref(0); conv_ref(1); conv_ref(2);
    // PAAR range 10..12
    cfg_data = 16'd10; ld_ref_start = 1; @(negedge clk); clear();
    cfg_data = 16'd12; ld_ref_end = 1;   @(negedge clk); clear();
    check(ref_start == 6'd10 && ref_end == 6'd12, "range registers");
    conv_ref(10); conv_ref(11); conv_ref(12); conv_ref(10);
    // AGUs: rows 4,6,8 ; columns 2,3,4
    cfg_data = 16'd2; ld_row_rate = 1;  @(negedge clk); clear();
    cfg_data = 16'd4; ld_row_base = 1;  @(negedge clk); clear();
    cfg_data = 16'd3; ld_row_count = 1; @(negedge clk); clear();
    cfg_data = 16'd1; ld_col_rate = 1;  @(negedge clk); clear();
    cfg_data = 16'd2; ld_col_base = 1;  @(negedge clk); clear();
    cfg_data = 16'd3; ld_col_count = 1; @(negedge clk); clear();
    for (int r = 0; r < 4; r++) begin
      int exp_row;
      exp_row = 4 + 2 * (r % 3);
      be_valid = 1; be_cmd = ARR_ACT; be_row_sel = ROWSEL_AGU; col_restart = 1;
      dec_ref = 1;   // conventional command at the same time loses
      #1;
      check(arr_cmd == ARR_ACT && arr_row == ROW_W'(exp_row) && arr_rtt && !arr_explicit,
            $sformatf("RTT ACT row %0d expected %0d", arr_row, exp_row));
      @(negedge clk); clear();
      for (int c = 0; c < 3; c++) begin
        be_valid = 1; be_cmd = ARR_RD; col_step = 1; #1;
        check(arr_cmd == ARR_RD && arr_col == COL_W'(2 + c), $sformatf("RTT column %0d", arr_col));
        check(row_c == (c == 2), "RowC on last column");
        @(negedge clk); clear();
      end
      be_valid = 1; be_cmd = ARR_PRE; row_step = 1; #1;
      check(arr_cmd == ARR_PRE, "RTT PRE");
      @(negedge clk); clear();
    end
    check(ref_row == 6'd11, "refresh counter untouched by RTT accesses");
    // explicit refresh of the refresh counter row
    be_valid = 1; be_cmd = ARR_ACT; be_row_sel = ROWSEL_REFCNT; be_explicit = 1; #1;
    check(arr_cmd == ARR_ACT && arr_row == 6'd11 && arr_explicit, "explicit refresh row");
    @(negedge clk); clear();
    be_valid = 1; be_cmd = ARR_PRE; ref_step = 1; @(negedge clk); clear();
    check(ref_row == 6'd12, "refresh counter advances after explicit refresh");
    // self refresh: with cke low, a REF of the range every 8 cycles
    begin
      int n, exp_row, first;
      n = 0; exp_row = 12; first = -1;
      cke = 0;
      for (int t = 0; t < 40; t++) begin
        #1;
        if (arr_cmd == ARR_REF) begin
          check(arr_row == ROW_W'(exp_row), $sformatf("self refresh row %0d expected %0d", arr_row, exp_row));
          if (first >= 0) check(t - first == 8 * n, $sformatf("self refresh interval at %0d", t));
          else first = t;
          n++;
          exp_row = (exp_row == 12) ? 10 : exp_row + 1;
        end
        @(negedge clk);
      end
      check(n == 5, $sformatf("%0d self refreshes in 40 cycles", n));
      cke = 1; #1;
      check(arr_cmd == ARR_NOP, "no self refresh with cke high");
    end
    // random configurations and slot sequences against a software model
    for (int trial = 0; trial < 40; trial++) begin
      int rs, re, rr, rb, rc, cr, cb, cc, ptr, ridx;
      rs = $urandom_range(0, 63); re = $urandom_range(rs, 63);
      rr = $urandom_range(0, 63); rb = $urandom_range(0, 63); rc = $urandom_range(1, 20);
      cr = $urandom_range(0, 15); cb = $urandom_range(0, 15); cc = $urandom_range(1, 6);
      cfg_data = 16'(rs); ld_ref_start = 1; @(negedge clk); clear();
      cfg_data = 16'(re); ld_ref_end = 1;   @(negedge clk); clear();
      cfg_data = 16'(rr); ld_row_rate = 1;  @(negedge clk); clear();
      cfg_data = 16'(rb); ld_row_base = 1;  @(negedge clk); clear();
      cfg_data = 16'(rc); ld_row_count = 1; @(negedge clk); clear();
      cfg_data = 16'(cr); ld_col_rate = 1;  @(negedge clk); clear();
      cfg_data = 16'(cb); ld_col_base = 1;  @(negedge clk); clear();
      cfg_data = 16'(cc); ld_col_count = 1; @(negedge clk); clear();
      ptr = rs; ridx = 0;
      for (int sl = 0; sl < 30; sl++) begin
        int kind;
        kind = $urandom_range(0, 2);   // 0 implicit, 1 explicit, 2 conventional REF
        if (kind == 2) begin
          conv_ref(ptr);
          ptr = (ptr == re) ? rs : ptr + 1;
        end else if (kind == 1) begin
          be_valid = 1; be_cmd = ARR_ACT; be_row_sel = ROWSEL_REFCNT; be_explicit = 1; col_restart = 1; #1;
          check(arr_cmd == ARR_ACT && arr_row == ROW_W'(ptr) && arr_explicit,
                $sformatf("random explicit row %0d expected %0d", arr_row, ptr));
          @(negedge clk); clear();
          be_valid = 1; be_cmd = ARR_PRE; ref_step = 1; @(negedge clk); clear();
          ptr = (ptr == re) ? rs : ptr + 1;
        end else begin
          be_valid = 1; be_cmd = ARR_ACT; be_row_sel = ROWSEL_AGU; col_restart = 1; #1;
          check(arr_cmd == ARR_ACT && arr_row == ROW_W'(rb + ridx * rr) && arr_rtt && !arr_explicit,
                $sformatf("random implicit row %0d expected %0d", arr_row, ROW_W'(rb + ridx * rr)));
          @(negedge clk); clear();
          for (int c = 0; c < cc; c++) begin
            be_valid = 1; be_cmd = ARR_WR; col_step = 1; #1;
            check(arr_cmd == ARR_WR && arr_col == COL_W'(cb + c * cr),
                  $sformatf("random column %0d expected %0d", arr_col, COL_W'(cb + c * cr)));
            check(row_c == (c == cc - 1), "random RowC");
            @(negedge clk); clear();
          end
          be_valid = 1; be_cmd = ARR_PRE; row_step = 1; @(negedge clk); clear();
          ridx = (ridx + 1 == rc) ? 0 : ridx + 1;
        end
        check(ref_row == ROW_W'(ptr), "random refresh pointer");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
