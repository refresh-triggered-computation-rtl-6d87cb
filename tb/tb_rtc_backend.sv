// tb_rtc_backend: checks the backend's configuration decode and its
// Act/Read/Write/Pre sequence.  A small column counter in the testbench stands
// in for the Column AGU and raises RowC on the NCOL-th column.  For each slot
// the command trace is compared with the expected one:
//   explicit   : ACT(refresh counter row) PRE, refresh counter stepped
//   implicit rd: ACT(AGU row) RD x NCOL PRE, Row AGU stepped
//   implicit wr: ACT(AGU row) WR x NCOL PRE
// It also checks that the backend waits in Idle while cke=0 or ld=1, returns
// to Idle from Pre when ld=1, and that a slot takes NCOL+2 cycles.
module tb_rtc_backend;
  import rtc_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  logic cfg_we = 0, slot_valid = 0, slot_exp_ref = 0, slot_we = 0, ld = 1, cke = 0;
  cfg_reg_e cfg_reg = CFG_REF_START;
  logic ld_ref_start, ld_ref_end, ld_row_rate, ld_row_base, ld_row_count;
  logic ld_col_rate, ld_col_base, ld_col_count;
  logic row_c, be_valid, be_explicit, ref_step, row_step, col_step, col_restart, idle;
  arr_cmd_e be_cmd;
  row_sel_e be_row_sel;
  int checks = 0, failures = 0;
  int ncol = 3;
  int col_cnt;

  rtc_backend dut (.*);
  always #5 clk = ~clk;

  // stand-in for the Column AGU's `last`
  assign row_c = (col_cnt == ncol - 1);
  always_ff @(posedge clk) begin
    if (col_restart) col_cnt <= 0;
    else if (col_step) col_cnt <= row_c ? 0 : col_cnt + 1;
  end

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

  // issue a slot and compare the command trace
  task automatic slot(bit e, bit w);
    int n;
    @(negedge clk);
    slot_valid = 1; slot_exp_ref = e; slot_we = w;
    @(negedge clk);
    slot_valid = 0;
    check(be_valid && be_cmd == ARR_ACT, "ACT first");
    check(be_row_sel == (e ? ROWSEL_REFCNT : ROWSEL_AGU), "row select");
    check(be_explicit == e, "explicit flag");
    check(col_restart, "column AGU restarted at ACT");
    n = 1;
    if (!e) begin
      for (int i = 0; i < ncol; i++) begin
        @(negedge clk); n++;
        check(be_valid && be_cmd == (w ? ARR_WR : ARR_RD) && col_step, $sformatf("column %0d command", i));
      end
    end
    @(negedge clk); n++;
    check(be_valid && be_cmd == ARR_PRE, "PRE");
    check(ref_step == e && row_step == !e, "counter / AGU step at PRE");
    check(n == (e ? 2 : ncol + 2), $sformatf("slot length %0d", n));
    @(negedge clk);
    check(!be_valid, "nothing after PRE");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // configuration decode
    for (int r = 0; r < 8; r++) begin
      @(negedge clk); cfg_we = 1; cfg_reg = cfg_reg_e'(r);
      #1;
      check({ld_col_count, ld_col_base, ld_col_rate, ld_row_count, ld_row_base,
             ld_row_rate, ld_ref_end, ld_ref_start} == 8'(1 << r), $sformatf("cfg decode %0d", r));
    end
    @(negedge clk); cfg_we = 0;
    // cke = 0: self refresh, stays idle
    slot_valid = 1; @(negedge clk); slot_valid = 0;
    check(idle && !be_valid, "idle while cke=0");
    cke = 1;
    slot_valid = 1; @(negedge clk); slot_valid = 0;
    check(idle && !be_valid, "idle while ld=1");
    ld = 0;
    repeat (2) @(negedge clk);
    check(idle, "Idle waits for a slot");
    slot(1, 0);
    slot(0, 0);
    slot(0, 1);
    ncol = 1;
    slot(0, 0);
    ncol = 5;
    slot(0, 1);
    slot(1, 1);
    check(!idle, "waits in Pre for the next slot");
    ld = 1;
    @(negedge clk);
    check(idle, "ld=1 returns to Idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
