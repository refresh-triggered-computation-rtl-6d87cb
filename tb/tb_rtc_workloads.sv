// tb_rtc_workloads: rtc_top at its default size (65,536 rows of 1,024 columns,
// one row slot every 195 cycles) running the memory footprints of the
// accelerator workloads RTC targets, one after the other:
//   LeNet               1.06 MB                  ->    543 rows of 2 KB
//   face recognition    one 1024x1024x3 B frame  ->  1,536 rows
//   GoogleNet           ~6.8 M 16-bit weights    ->  6,640 rows
//   ResNet-50           ~25.6 M 16-bit weights   -> 25,000 rows
//   AlexNet             ~61 M 16-bit weights     -> 59,600 rows
// (LeNet's and the frame's sizes are the published ones; the weight counts
// are the networks' well-known sizes, stored at 2 bytes per weight.)
// The workloads differ only in size, so they share this testbench.
//
// Each workload is mapped to rows 0..N-1.  The refresh range (PAAR) is set to
// those rows, the Row AGU walks them with stride 1, and the Column AGU
// transfers 16 columns per row.  At 60 frames per second a frame takes
// 16.7 ms, so a network that reads its whole footprint once per frame
// touches every row several times per 64 ms window: N_a = N_r = N, and RTT
// can replace every refresh.  Each workload runs one full window of write
// slots and one of read slots.  The scoreboard predicts every array command;
// the array model checks retention, protocol and read data, and that no row
// outside the footprint is touched.  For LeNet a further window runs with
// RTT bypassed, so that only PAAR acts: then exactly N conventional refreshes
// of the footprint rows are issued.  Per workload the test prints how many
// row refreshes one window takes with conventional refresh (65,536), PAAR
// alone (N) and full RTC (0).
module tb_rtc_workloads;
  import rtc_pkg::*;
  localparam int unsigned ROW_W = 16, COL_W = 10, REFI = 195, DATA_W = 32;
  localparam int unsigned NCOL = 16, NW = 5;
  localparam int unsigned ROWS_W [NW] = '{543, 1536, 6640, 25000, 59600};
  localparam string       NAME_W [NW] = '{"LeNet", "face recognition", "GoogleNet",
                                          "ResNet-50", "AlexNet"};

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

  // retention bound: the largest footprint plus a few slots of slack
  dram_array_model #(.ROW_W(ROW_W), .COL_W(COL_W), .DATA_W(DATA_W),
                     .RETENTION(longint'((59600 + 6) * REFI))) u_mem (
    .clk, .arr_cmd, .arr_row, .arr_col, .wdata, .rdata);

  longint n_rows = 1;
  logic sync_ref = 0, sync_agu = 0, sync_rate = 0;
  rtt_checker #(.ROW_W(ROW_W), .COL_W(COL_W)) u_chk (
    .clk, .enable(1'b1), .arr_cmd, .arr_row, .arr_col, .arr_rtt, .arr_explicit,
    .sync_ref, .sync_agu, .sync_rate, .nr(n_rows), .na(n_rows),
    .ref_start(64'd0), .ref_end(n_rows - 1),
    .row_base(64'd0), .row_rate(64'd1), .row_count(n_rows),
    .col_base(64'd0), .col_rate(64'd1), .col_count(longint'(NCOL)));

  always #2.5 clk = ~clk;   // 200 MHz

  // watchdog: all windows plus configuration slack
  initial begin
    int total;
    total = 0;
    for (int w = 0; w < NW; w++) total += 2 * int'(ROWS_W[w]) + 20;
    total += int'(ROWS_W[0]);
    repeat (total * int'(REFI)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + u_chk.checks, failures + u_chk.failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // write data encodes row and column, so a read shows where it came from
  assign wdata = {u_mem.open_row, 6'(0), arr_col} ^ 32'h3C3C_0000;
  logic [ROW_W-1:0] rd_row_q;
  logic [COL_W-1:0] rd_col_q;
  int n_rd_checked = 0;
  always @(posedge clk) begin
    if (acc_rd_valid) begin
      n_rd_checked++;
      check(rdata == ({rd_row_q, 6'(0), rd_col_q} ^ 32'h3C3C_0000),
            $sformatf("read data row %0d col %0d", rd_row_q, rd_col_q));
    end
    if (arr_cmd == ARR_RD) begin rd_row_q <= u_mem.open_row; rd_col_q <= arr_col; end
  end

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

  task automatic wait_slots(int n);
    int s0;
    s0 = u_chk.n_slots;
    while (u_chk.n_slots - s0 < n) @(negedge clk);
  endtask

  task automatic wait_conv_refs(int n);
    int r0;
    r0 = u_chk.n_conv_ref;
    while (u_chk.n_conv_ref - r0 < n) @(negedge clk);
  endtask

  initial begin
    int e0, c0, wr0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < NW; w++) begin
      int n;
      n = ROWS_W[w];
      // back to Idle, release the previous footprint
      ld = 1;
      wait_slot();
      while (!be_idle) @(negedge clk);
      u_mem.free_all();
      n_rows = longint'(n);
      // PAAR range = footprint, AGUs walk it, N_r = N_a = N
      refr = 1; @(negedge clk); refr = 0;
      send_word(0); send_word(32'(n - 1));
      repeat (2) @(negedge clk);
      sync_ref = 1; @(negedge clk); sync_ref = 0;
      wait_slot();
      rtt = 1; @(negedge clk); rtt = 0;
      send_word(1); send_word(0); send_word(32'(n)); send_word(1); send_word(0); send_word(NCOL);
      repeat (2) @(negedge clk);
      sync_agu = 1; @(negedge clk); sync_agu = 0;
      rate_fsm = 1; @(negedge clk); rate_fsm = 0;
      send_word(32'(n)); send_word(32'(n));
      @(negedge clk);
      while (cfg_busy) @(negedge clk);
      u_mem.mark_alloc(0, n - 1);
      u_mem.clear_touches();
      n_rd_checked = 0;
      // window 1: writes, window 2: reads
      e0 = u_chk.n_explicit; c0 = u_chk.n_conv_ref; wr0 = u_chk.n_impl_wr;
      we = 1; ld = 0; sync_rate = 1; @(negedge clk); sync_rate = 0;
      wait_slots(n);
      we = 0;
      wait_slots(n);
      repeat (NCOL + 4) @(negedge clk);
      ld = 1;
      check(u_chk.n_explicit == e0, $sformatf("%s: %0d explicit refreshes, none expected",
                                              NAME_W[w], u_chk.n_explicit - e0));
      check(u_chk.n_conv_ref == c0, $sformatf("%s: %0d conventional refreshes in RTT",
                                              NAME_W[w], u_chk.n_conv_ref - c0));
      check(u_chk.n_impl_wr - wr0 == n * NCOL, $sformatf("%s: %0d columns written",
                                                         NAME_W[w], u_chk.n_impl_wr - wr0));
      check(n_rd_checked >= (n - 1) * NCOL, $sformatf("%s: %0d reads checked", NAME_W[w], n_rd_checked));
      begin
        int outside, inside_min;
        outside = 0; inside_min = 1 << 30;
        for (int r = 0; r < (1 << ROW_W); r++)
          if (r >= n) outside += u_mem.touches[r];
          else if (u_mem.touches[r] < inside_min) inside_min = u_mem.touches[r];
        check(outside == 0, $sformatf("%s: %0d touches outside the footprint", NAME_W[w], outside));
        check(inside_min >= 2, $sformatf("%s: a row restored only %0d times", NAME_W[w], inside_min));
      end
      $display("%-16s %6d rows: row refreshes per window: conventional %0d, PAAR alone %0d, RTC 0",
               NAME_W[w], n, 1 << ROW_W, n);
      // LeNet: one more window with RTT bypassed, PAAR alone
      if (w == 0) begin
        rtc_en = 0; ld = 0;
        c0 = u_chk.n_conv_ref;
        u_mem.clear_touches();
        wait_conv_refs(n);
        ld = 1; rtc_en = 1;
        check(u_chk.n_conv_ref - c0 == n, "LeNet PAAR window: refresh count");
        begin
          int outside, inside_min;
          outside = 0; inside_min = 1 << 30;
          for (int r = 0; r < (1 << ROW_W); r++)
            if (r >= n) outside += u_mem.touches[r];
            else if (u_mem.touches[r] < inside_min) inside_min = u_mem.touches[r];
          check(outside == 0 && inside_min == 1, "LeNet PAAR window: each footprint row refreshed once, no other row");
        end
      end
      u_mem.check_all();
    end
    check(u_mem.violations == 0, $sformatf("%0d retention violations", u_mem.violations));
    check(u_mem.protocol_errors == 0, $sformatf("%0d protocol errors", u_mem.protocol_errors));
    $display("TB_RESULT checks=%0d failures=%0d", checks + u_chk.checks, failures + u_chk.failures);
    $finish;
  end
endmodule
