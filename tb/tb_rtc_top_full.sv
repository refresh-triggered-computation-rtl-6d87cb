// tb_rtc_top_full: rtc_top at its default size (65,536 rows of 1,024
// columns per bank, one refresh slot every 195 cycles = 64 ms / 65,536 rows
// at 200 MHz)
// through one complete RTT operation: configure the refresh range, the AGUs
// and N_r/N_a, then run two full refresh periods (one of writes, one of
// reads).  The application holds 520 rows (1000..1519, N_r = 520) and
// accesses 390 of them (1000..1389, N_a = 390, 64 columns each), so
// Algorithm 1 gives P = 4 and exactly 130 explicit refreshes (rows
// 1390..1519) per period.  The scoreboard predicts every array command; the
// array model checks retention of the 520 rows, the command protocol and the
// read data, and that no row outside them is touched (PAAR).  The AGU and
// rate reconfiguration must take no more than 100 cycles.
module tb_rtc_top_full;
  import rtc_pkg::*;
  localparam int unsigned ROW_W = 16, COL_W = 10, REFI = 195, DATA_W = 32;
  localparam int unsigned NR = 520, NA = 390, BASE = 1000, NCOL = 64;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  logic ld = 1, refr = 0, rtt = 0, rate_fsm = 0, cfg_valid = 0, we = 0, rtc_en = 1, cke = 1;
  logic [31:0] cfg_data = '0;
  logic cfg_ready, mc_ready, acc_wr_take, acc_rd_valid, arr_rtt, arr_explicit;
  logic fe_active, slot_tick, be_idle, cfg_busy;
  dram_cmd_e mc_cmd = CMD_NOP;
  logic [ROW_W-1:0] mc_row = '0, ref_row, ref_start, ref_end, arr_row;
  logic [COL_W-1:0] mc_col = '0, arr_col;
  arr_cmd_e arr_cmd;
  logic [DATA_W-1:0] wdata, rdata;
  int checks = 0, failures = 0;

  rtc_top dut (.*);

  dram_array_model #(.ROW_W(ROW_W), .COL_W(COL_W), .DATA_W(DATA_W),
                     .RETENTION(longint'((NR + 6) * REFI))) u_mem (
    .clk, .arr_cmd, .arr_row, .arr_col, .wdata, .rdata);

  logic sync_ref = 0, sync_agu = 0, sync_rate = 0;
  rtt_checker #(.ROW_W(ROW_W), .COL_W(COL_W)) u_chk (
    .clk, .enable(1'b1), .arr_cmd, .arr_row, .arr_col, .arr_rtt, .arr_explicit,
    .sync_ref, .sync_agu, .sync_rate, .nr(longint'(NR)), .na(longint'(NA)),
    .ref_start(longint'(BASE + NA)), .ref_end(longint'(BASE + NR - 1)),
    .row_base(longint'(BASE)), .row_rate(64'd1), .row_count(longint'(NA)),
    .col_base(64'd0), .col_rate(64'd1), .col_count(longint'(NCOL)));

  always #2.5 clk = ~clk;   // 200 MHz

  initial begin
    repeat (3 * NR * REFI) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + u_chk.checks, failures + u_chk.failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  assign wdata = {u_mem.open_row, 6'(0), arr_col} ^ 32'h5A5A_0000;
  logic [ROW_W-1:0] rd_row_q;
  logic [COL_W-1:0] rd_col_q;
  int n_rd_checked = 0;
  always @(posedge clk) begin
    if (acc_rd_valid) begin
      n_rd_checked++;
      check(rdata == ({rd_row_q, 6'(0), rd_col_q} ^ 32'h5A5A_0000),
            $sformatf("read data row %0d col %0d", rd_row_q, rd_col_q));
    end
    if (arr_cmd == ARR_RD) begin rd_row_q <= u_mem.open_row; rd_col_q <= arr_col; end
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic wait_slot();
    @(posedge clk); while (!slot_tick) @(posedge clk);
    @(negedge clk); @(negedge clk);
  endtask

  task automatic send_word(logic [31:0] d);
    cfg_data = d; cfg_valid = 1;
    @(posedge clk);
    while (!cfg_ready) @(posedge clk);
    @(negedge clk); cfg_valid = 0;
  endtask

  initial begin
    int e0, s0, t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // refresh range, then AGU, then rate parameters (each right after a slot)
    wait_slot();
    refr = 1; @(negedge clk); refr = 0;
    send_word(BASE + NA); send_word(BASE + NR - 1);
    repeat (2) @(negedge clk);
    sync_ref = 1; @(negedge clk); sync_ref = 0;
    wait_slot();
    t0 = cyc;
    rtt = 1; @(negedge clk); rtt = 0;
    send_word(1); send_word(BASE); send_word(NA); send_word(1); send_word(0); send_word(NCOL);
    repeat (2) @(negedge clk);
    sync_agu = 1; @(negedge clk); sync_agu = 0;
    rate_fsm = 1; @(negedge clk); rate_fsm = 0;
    send_word(NR); send_word(NA);
    @(negedge clk);
    while (cfg_busy) @(negedge clk);
    // reconfiguring the AGUs and the rate parameters: about 100 cycles
    check(cyc - t0 <= 100, $sformatf("AGU and rate reconfiguration took %0d cycles", cyc - t0));
    $display("AGU and rate reconfiguration: %0d cycles", cyc - t0);
    u_mem.mark_alloc(BASE, BASE + NR - 1);
    u_mem.clear_touches();
    // period 1: writes
    we = 1; ld = 0; sync_rate = 1; @(negedge clk); sync_rate = 0;
    e0 = u_chk.n_explicit; s0 = u_chk.n_slots;
    while (u_chk.n_slots - s0 < NR) @(negedge clk);
    check(u_chk.n_explicit - e0 == NR - NA, $sformatf("explicit refreshes in period 1: %0d", u_chk.n_explicit - e0));
    check(u_chk.n_impl_wr == NA * NCOL, $sformatf("columns written: %0d", u_chk.n_impl_wr));
    // period 2: reads
    we = 0;
    e0 = u_chk.n_explicit; s0 = u_chk.n_slots;
    while (u_chk.n_slots - s0 < NR) @(negedge clk);
    repeat (NCOL + 4) @(negedge clk);
    check(u_chk.n_explicit - e0 == NR - NA, $sformatf("explicit refreshes in period 2: %0d", u_chk.n_explicit - e0));
    check(n_rd_checked == (NA - 1) * NCOL || n_rd_checked == NA * NCOL, $sformatf("reads checked: %0d", n_rd_checked));
    ld = 1;
    repeat (REFI + 4) @(negedge clk);
    check(be_idle, "back to Idle");
    begin
      int outside, inside_min;
      outside = 0; inside_min = 1 << 30;
      for (int r = 0; r < (1 << ROW_W); r++)
        if (r < BASE || r >= BASE + NR) outside += u_mem.touches[r];
        else if (u_mem.touches[r] < inside_min) inside_min = u_mem.touches[r];
      check(outside == 0, $sformatf("%0d touches outside the allocated rows", outside));
      check(inside_min >= 1, "every allocated row restored");
    end
    u_mem.check_all();
    check(u_mem.violations == 0, $sformatf("%0d retention violations", u_mem.violations));
    check(u_mem.protocol_errors == 0, $sformatf("%0d protocol errors", u_mem.protocol_errors));
    $display("slots %0d, explicit %0d, written %0d, read %0d columns",
             u_chk.n_slots, u_chk.n_explicit, u_chk.n_impl_wr, u_chk.n_impl_rd);
    $display("TB_RESULT checks=%0d failures=%0d", checks + u_chk.checks, failures + u_chk.failures);
    $finish;
  end
endmodule
