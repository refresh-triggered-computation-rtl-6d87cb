// tb_rtc_top: end-to-end test of full-RTC on a small bank (32 rows of 8
// columns, one refresh slot every 16 cycles), with a behavioural array that
// checks data retention and the command protocol, and a scoreboard
// (rtt_checker) that predicts every array command from Algorithm 1 and the
// configured patterns.  Phases:
//   A  conventional: REF every slot over the whole bank, one base-controller
//      write (ACT/WR/PRE) passed through
//   B  PAAR + partial RTT: rows 0..11 hold data (N_r = 12); the Row AGU
//      accesses rows 0..7 (N_a = 8), the refresh range is 8..11.  One period
//      of write slots, then read slots: 8 of every 12 slots are accesses,
//      4 are explicit refreshes, read data must match what was written
//   C  full RTT: the AGU covers all 12 rows (N_a = N_r), no explicit refresh;
//      the AGU is reconfigured with CKE held low, as the paper does
//   D  RTC bypassed (rtc_en=0) with the refresh range widened to 0..11
//   E  self refresh (cke=0): only the bank's own refreshes of rows 0..11
//      (long enough that retention fails without them)
//   F  ld=1: back to Idle
// Every mechanism is counted and a failure is counted for one that never
// happened.  No allocated row may go longer than (N_r+6) slots unrestored,
// and rows 12..31 may not be touched after phase A.
module tb_rtc_top;
  import rtc_pkg::*;
  localparam int unsigned ROW_W = 5, COL_W = 3, CFG_W = 32, REFI = 16, DATA_W = 32;
  localparam int unsigned NR = 12, NA = 8, NCOL = 4;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  logic ld = 1, refr = 0, rtt = 0, rate_fsm = 0, cfg_valid = 0, we = 0, rtc_en = 1, cke = 1;
  logic [CFG_W-1:0] cfg_data = '0;
  logic cfg_ready, mc_ready, acc_wr_take, acc_rd_valid, arr_rtt, arr_explicit;
  logic fe_active, slot_tick, be_idle, cfg_busy;
  dram_cmd_e mc_cmd = CMD_NOP;
  logic [ROW_W-1:0] mc_row = '0, ref_row, ref_start, ref_end, arr_row;
  logic [COL_W-1:0] mc_col = '0, arr_col;
  arr_cmd_e arr_cmd;
  logic [DATA_W-1:0] wdata, rdata;
  int checks = 0, failures = 0;

  rtc_top #(.ROW_W(ROW_W), .COL_W(COL_W), .CFG_W(CFG_W), .REFI_CYCLES(REFI)) dut (.*);

  dram_array_model #(.ROW_W(ROW_W), .COL_W(COL_W), .DATA_W(DATA_W),
                     .RETENTION(longint'((NR + 6) * REFI))) u_mem (
    .clk, .arr_cmd, .arr_row, .arr_col, .wdata, .rdata);

  // scoreboard configuration
  logic sync_ref = 0, sync_agu = 0, sync_rate = 0, chk_en = 0;
  longint c_nr = 0, c_na = 0, c_rs = 0, c_re = (1 << ROW_W) - 1;
  longint c_rb = 0, c_rr = 1, c_rc = 1, c_cb = 0, c_cr = 1, c_cc = 1;
  rtt_checker #(.ROW_W(ROW_W), .COL_W(COL_W)) u_chk (
    .clk, .enable(chk_en), .arr_cmd, .arr_row, .arr_col, .arr_rtt, .arr_explicit,
    .sync_ref, .sync_agu, .sync_rate, .nr(c_nr), .na(c_na), .ref_start(c_rs), .ref_end(c_re),
    .row_base(c_rb), .row_rate(c_rr), .row_count(c_rc), .col_base(c_cb), .col_rate(c_cr),
    .col_count(c_cc));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + u_chk.checks, failures + u_chk.failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // accelerator data: a value derived from row and column
  function automatic logic [DATA_W-1:0] pattern(logic [ROW_W-1:0] r, logic [COL_W-1:0] c);
    return 32'hC0DE_0000 ^ (32'(r) << 8) ^ 32'(c) ^ 32'(phase_seed);
  endfunction
  int phase_seed = 7;
  assign wdata = pattern(u_mem.open_row, arr_col);

  // read data check
  logic [ROW_W-1:0] rd_row_q;
  logic [COL_W-1:0] rd_col_q;
  int n_rd_checked = 0;
  bit written [logic [ROW_W+COL_W-1:0]];
  always @(posedge clk) begin
    if (acc_rd_valid && written.exists({rd_row_q, rd_col_q})) begin
      n_rd_checked++;
      check(rdata == pattern(rd_row_q, rd_col_q), $sformatf("read data row %0d col %0d", rd_row_q, rd_col_q));
    end
    if (arr_cmd == ARR_RD) begin rd_row_q <= u_mem.open_row; rd_col_q <= arr_col; end
    if (arr_cmd == ARR_WR) written[{u_mem.open_row, arr_col}] = 1;
    if (acc_wr_take) check(arr_cmd == ARR_WR && arr_rtt, "acc_wr_take only on RTT writes");
  end

  // mechanism counters
  int m_conv_ref, m_mc_access, m_explicit, m_impl_wr, m_impl_rd, m_cfg_refr, m_cfg_rtt,
      m_cfg_rate, m_cfg_cke_low, m_full_elim, m_bypass, m_self_refresh, m_ld_return, m_paar;

  task automatic wait_slot();
    @(posedge clk); while (!slot_tick) @(posedge clk);
    @(negedge clk); @(negedge clk);
  endtask

  task automatic send_word(logic [CFG_W-1:0] d);
    cfg_data = d; cfg_valid = 1;
    @(posedge clk);
    while (!cfg_ready) @(posedge clk);
    @(negedge clk); cfg_valid = 0;
  endtask

  task automatic cfg_refresh(int s, int e);
    wait_slot();
    refr = 1; @(negedge clk); refr = 0;
    send_word(s); send_word(e);
    repeat (2) @(negedge clk);
    c_rs = s; c_re = e; sync_ref = 1; @(negedge clk); sync_ref = 0;
    check(ref_start == ROW_W'(s) && ref_end == ROW_W'(e) && ref_row == ROW_W'(s), "refresh range loaded");
    m_cfg_refr++;
  endtask

  task automatic cfg_agu(int rr, int rb, int rc, int cr, int cb, int cc, bit cke_low = 0);
    if (cke_low) cke = 0;   // the paper keeps CKE low while reconfiguring
    else wait_slot();
    rtt = 1; @(negedge clk); rtt = 0;
    send_word(rr); send_word(rb); send_word(rc); send_word(cr); send_word(cb); send_word(cc);
    repeat (2) @(negedge clk);
    if (cke_low) begin
      m_cfg_cke_low++;
      cke = 1;
    end
    c_rr = rr; c_rb = rb; c_rc = rc; c_cr = cr; c_cb = cb; c_cc = cc;
    sync_agu = 1; @(negedge clk); sync_agu = 0;
    m_cfg_rtt++;
  endtask

  task automatic cfg_rate(int nr, int na);
    rate_fsm = 1; @(negedge clk); rate_fsm = 0;
    send_word(nr); send_word(na);
    @(negedge clk);
    while (cfg_busy) @(negedge clk);
    c_nr = nr; c_na = na;
    m_cfg_rate++;
  endtask

  task automatic go_active(logic w);
    we = w;
    ld = 0; sync_rate = 1; @(negedge clk); sync_rate = 0;
  endtask

  task automatic mc_issue(dram_cmd_e c, int r, int col);
    mc_cmd = c; mc_row = ROW_W'(r); mc_col = COL_W'(col);
    @(posedge clk); while (!mc_ready) @(posedge clk);
    @(negedge clk); mc_cmd = CMD_NOP;
  endtask

  initial begin
    int e0, s0, a0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    chk_en = 1; sync_ref = 1; @(negedge clk); sync_ref = 0;

    // ---- A: conventional operation
    repeat (5 * REFI) @(negedge clk);
    wait_slot();
    mc_issue(CMD_ACT, 20, 0); mc_issue(CMD_WR, 20, 1); mc_issue(CMD_PRE, 0, 0);
    repeat (3) @(negedge clk);
    m_mc_access = u_mem.n_wr;
    check(u_mem.touches[20] >= 1 && written.exists({5'd20, 3'd1}), "base controller write reached row 20");

    // ---- B: PAAR + partial RTT
    cfg_refresh(NA, NR - 1);
    cfg_agu(1, 0, NA, 1, 0, NCOL);
    cfg_rate(NR, NA);
    u_mem.mark_alloc(0, NR - 1);
    u_mem.clear_touches();
    go_active(1);
    repeat (NR * REFI) @(negedge clk);
    we = 0;
    repeat (3 * NR * REFI) @(negedge clk);
    check(n_rd_checked > 0, "RTT reads returned written data");
    m_explicit = u_chk.n_explicit;
    m_impl_wr = u_chk.n_impl_wr;
    m_impl_rd = u_chk.n_impl_rd;
    // 4 explicit out of every 12 slots
    check(u_chk.n_slots >= 3 * NR, $sformatf("slots %0d", u_chk.n_slots));
    check(u_chk.n_explicit * NR >= (u_chk.n_slots - 1) * (NR - NA) - NR &&
          u_chk.n_explicit * NR <= (u_chk.n_slots + 1) * (NR - NA) + NR,
          $sformatf("explicit share %0d of %0d slots", u_chk.n_explicit, u_chk.n_slots));

    // ---- C: accesses cover every allocated row: no explicit refresh
    ld = 1; repeat (2) @(negedge clk);
    cfg_agu(1, 0, NR, 1, 0, NCOL, 1);
    cfg_rate(NR, NR);
    e0 = u_chk.n_explicit; s0 = u_chk.n_slots;
    go_active(0);
    repeat (2 * NR * REFI) @(negedge clk);
    check(u_chk.n_slots - s0 >= 2 * NR - 1, "slots in full RTT");
    if (u_chk.n_explicit == e0 && u_chk.n_slots - s0 >= NR) m_full_elim++;

    // ---- D: RTC bypassed, refresh range widened to the allocated rows
    ld = 1; repeat (2) @(negedge clk);
    cfg_refresh(0, NR - 1);
    a0 = u_chk.n_conv_ref;
    go_active(0);
    rtc_en = 0;
    s0 = u_chk.n_slots;
    repeat (2 * NR * REFI) @(negedge clk);
    if (u_chk.n_conv_ref - a0 >= 2 * NR - 2 && u_chk.n_slots == s0) m_bypass++;
    rtc_en = 1;

    // ---- E: self refresh
    begin
      int a0, r0;
      a0 = u_mem.n_act; r0 = u_chk.n_conv_ref;
      cke = 0;
      repeat (3 * NR * REFI) @(negedge clk);
      // the bank refreshes its range by itself, nothing else happens
      if (u_mem.n_act == a0 && u_chk.n_conv_ref - r0 >= 3 * NR - 2) m_self_refresh++;
      cke = 1;
    end
    repeat (2 * REFI) @(negedge clk);

    // ---- F: back to Idle
    ld = 1;
    repeat (REFI + 4) @(negedge clk);
    if (be_idle && !fe_active) m_ld_return++;

    // PAAR: rows outside 0..NR-1 untouched since phase B
    begin
      int outside;
      outside = 0;
      for (int r = NR; r < (1 << ROW_W); r++) outside += u_mem.touches[r];
      check(outside == 0, $sformatf("%0d touches outside the allocated rows", outside));
      if (outside == 0 && m_conv_ref >= 0) m_paar++;
    end
    m_conv_ref = u_chk.n_conv_ref;

    u_mem.check_all();
    check(u_mem.violations == 0, $sformatf("%0d retention violations", u_mem.violations));
    check(u_mem.protocol_errors == 0, $sformatf("%0d protocol errors", u_mem.protocol_errors));

    $display("mechanisms: conventional REF %0d, base-controller access %0d, explicit refresh %0d,",
             m_conv_ref, m_mc_access, m_explicit);
    $display("  implicit write %0d, implicit read %0d, reconfig refr/rtt/rate %0d/%0d/%0d,",
             m_impl_wr, m_impl_rd, m_cfg_refr, m_cfg_rtt, m_cfg_rate);
    $display("  reconfig with CKE low %0d, full elimination %0d, bypass %0d, self refresh %0d, ld return %0d, PAAR %0d",
             m_cfg_cke_low, m_full_elim, m_bypass, m_self_refresh, m_ld_return, m_paar);
    check(m_conv_ref > 0, "mechanism: conventional refresh");
    check(m_mc_access > 0, "mechanism: base-controller access");
    check(m_explicit > 0, "mechanism: explicit refresh");
    check(m_impl_wr > 0, "mechanism: implicit refresh by write");
    check(m_impl_rd > 0, "mechanism: implicit refresh by read");
    check(m_cfg_refr > 0 && m_cfg_rtt > 0 && m_cfg_rate > 0, "mechanism: all three reconfigurations");
    check(m_cfg_cke_low > 0, "mechanism: reconfiguration with CKE low");
    check(m_full_elim > 0, "mechanism: all refreshes eliminated");
    check(m_bypass > 0, "mechanism: RTC bypass");
    check(m_self_refresh > 0, "mechanism: self refresh idle");
    check(m_ld_return > 0, "mechanism: return to Idle");
    check(m_paar > 0, "mechanism: PAAR");
    $display("TB_RESULT checks=%0d failures=%0d", checks + u_chk.checks, failures + u_chk.failures);
    $finish;
  end
endmodule
