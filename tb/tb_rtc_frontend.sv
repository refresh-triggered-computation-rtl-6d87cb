// tb_rtc_frontend: checks the frontend controller's link traffic.
//  - outside Active, a conventional REF every REFI cycles (interval checked);
//  - ld+refr forwards two CFG writes (refresh start, end) with their data;
//  - ld+rtt forwards rate + five other AGU words in register order;
//  - ld+rate_fsm loads N_r, N_a locally (no link traffic);
//  - ld=0 enters Active: a SLOT every REFI cycles whose exp_ref follows
//    Algorithm 1 (N_r=4, N_a=2 gives 0,1,0,1...), carrying we, link_ld low,
//    and the base controller held off;
//  - rtc_en=0 in Active falls back to REF; cke=0 stops all traffic;
//  - ld=1 returns to Idle and the base controller's commands pass again.
module tb_rtc_frontend;
  import rtc_pkg::*;
  localparam int unsigned ROW_W = 6, COL_W = 4, CFG_W = 16, REFI = 20;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  logic ld = 1, refr = 0, rtt = 0, rate_fsm = 0, cfg_valid = 0, we = 0, rtc_en = 1, cke = 1;
  logic [CFG_W-1:0] cfg_data = '0;
  logic cfg_ready, mc_ready;
  dram_cmd_e mc_cmd = CMD_ACT;
  logic [ROW_W-1:0] mc_row = 6'd7;
  logic [COL_W-1:0] mc_col = 4'd3;
  dram_cmd_e link_cmd;
  logic [ROW_W-1:0] link_row;
  logic [COL_W-1:0] link_col;
  cfg_reg_e link_cfg_reg;
  logic [CFG_W-1:0] link_cfg_data;
  logic link_exp_ref, link_we, link_ld, link_cke, active, cfg_busy, slot_tick;
  int checks = 0, failures = 0;

  rtc_frontend #(.ROW_W(ROW_W), .COL_W(COL_W), .CFG_W(CFG_W), .REFI_CYCLES(REFI)) dut (.*);
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

  // link monitor
  int cyc = 0, last_refresh = -1, n_ref = 0, n_slot = 0, n_cfg = 0, n_mc = 0;
  bit   exp_seq[$];
  cfg_reg_e cfg_regs[$];
  logic [CFG_W-1:0] cfg_vals[$];
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (link_cmd == CMD_REF || link_cmd == CMD_SLOT) begin
      if (last_refresh >= 0) check(cyc - last_refresh == REFI, $sformatf("refresh interval %0d", cyc - last_refresh));
      last_refresh = cyc;
      if (link_cmd == CMD_REF) n_ref++;
      else begin
        n_slot++; exp_seq.push_back(link_exp_ref);
        check(link_we == we && !link_ld, "slot carries we, ld low");
      end
    end
    if (link_cmd == CMD_CFG) begin n_cfg++; cfg_regs.push_back(link_cfg_reg); cfg_vals.push_back(link_cfg_data); end
    if (mc_ready && link_cmd == mc_cmd) n_mc++;
    if (active) check(!mc_ready, "base controller held off in Active");
  end

  task automatic send_word(logic [CFG_W-1:0] d);
    cfg_data = d; cfg_valid = 1;
    @(posedge clk);
    while (!cfg_ready) @(posedge clk);
    @(negedge clk); cfg_valid = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3 * REFI + 2) @(negedge clk);
    check(n_ref == 3, $sformatf("conventional REFs while idle: %0d", n_ref));
    check(n_mc > 0, "base controller commands pass in Idle");
    // refresh counter range
    refr = 1; @(negedge clk); refr = 0;
    send_word(16'd8); send_word(16'd11);
    @(negedge clk);
    check(cfg_regs.size() == 2 && cfg_regs[0] == CFG_REF_START && cfg_regs[1] == CFG_REF_END &&
          cfg_vals[0] == 16'd8 && cfg_vals[1] == 16'd11, "refresh range words");
    // AGU: rate then five other parameters
    rtt = 1; @(negedge clk); rtt = 0;
    for (int i = 0; i < 6; i++) send_word(16'(100 + i));
    @(negedge clk);
    check(cfg_regs.size() == 8, $sformatf("AGU words forwarded: %0d", cfg_regs.size() - 2));
    for (int i = 0; i < 6 && i + 2 < cfg_regs.size(); i++)
      check(cfg_regs[i + 2] == cfg_reg_e'(4'(CFG_ROW_RATE) + 4'(i)) && cfg_vals[i + 2] == 16'(100 + i),
            $sformatf("AGU word %0d", i));
    // rate parameters: N_r = 4, N_a = 2
    rate_fsm = 1; @(negedge clk); rate_fsm = 0;
    send_word(16'd4); send_word(16'd2);
    @(negedge clk);
    check(n_cfg == 8, "N_r / N_a stay in the memory controller");
    while (cfg_busy) @(negedge clk);
    // Active
    ld = 0; we = 1;
    repeat (8 * REFI) @(negedge clk);
    check(active, "Active after ld=0");
    check(n_slot >= 7, $sformatf("slots in Active: %0d", n_slot));
    for (int i = 0; i < exp_seq.size(); i++)
      check(exp_seq[i] == (i % 2 == 1), $sformatf("exp_ref slot %0d = %0d", i, exp_seq[i]));
    // RTC bypass
    begin
      int r0, s0;
      r0 = n_ref; s0 = n_slot;
      rtc_en = 0; repeat (3 * REFI) @(negedge clk);
      check(n_ref - r0 == 3 && n_slot == s0, $sformatf("REF while RTC disabled: %0d REF, %0d SLOT", n_ref - r0, n_slot - s0));
      rtc_en = 1;
    end
    // self refresh
    begin
      int r0;
      r0 = n_ref + n_slot;
      cke = 0; repeat (3 * REFI) @(negedge clk);
      check(n_ref + n_slot == r0, $sformatf("no refresh traffic with cke=0: %0d", n_ref + n_slot - r0));
      cke = 1; last_refresh = -1;
    end
    // back to Idle
    ld = 1;
    repeat (2 * REFI) @(negedge clk);
    check(!active, "ld=1 returns to Idle");
    begin
      int m0;
      m0 = n_mc;
      repeat (10) @(negedge clk);
      check(n_mc > m0, "base controller commands pass again");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
