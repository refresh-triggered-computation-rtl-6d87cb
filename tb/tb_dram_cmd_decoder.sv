// tb_dram_cmd_decoder: drives random link commands and checks, one cycle
// later, that exactly the matching strobe fires with the right Row ID,
// Column ID, configuration register/data or slot fields, and that nothing
// but a configuration write is decoded while cke is low.
module tb_dram_cmd_decoder;
  import rtc_pkg::*;
  localparam int unsigned ROW_W = 8, COL_W = 5, CFG_W = 16;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  dram_cmd_e link_cmd = CMD_NOP;
  logic [ROW_W-1:0] link_row = '0;
  logic [COL_W-1:0] link_col = '0;
  cfg_reg_e link_cfg_reg = CFG_REF_START;
  logic [CFG_W-1:0] link_cfg_data = '0;
  logic link_exp_ref = 0, link_we = 0, link_ld = 1, link_cke = 0;
  logic dec_act, dec_rd, dec_wr, dec_pre, dec_ref, cfg_we, slot_valid, slot_exp_ref, slot_we, ld, cke;
  logic [ROW_W-1:0] row_id;
  logic [COL_W-1:0] col_id;
  cfg_reg_e cfg_reg;
  logic [CFG_W-1:0] cfg_data;
  int checks = 0, failures = 0;

  dram_cmd_decoder #(.ROW_W(ROW_W), .COL_W(COL_W), .CFG_W(CFG_W)) dut (.*);
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

  initial begin
    dram_cmd_e c;
    logic [ROW_W-1:0] r; logic [COL_W-1:0] col; cfg_reg_e cr; logic [CFG_W-1:0] cd;
    logic e, w, l, k;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      c = dram_cmd_e'($urandom % 8); r = ROW_W'($urandom); col = COL_W'($urandom);
      cr = cfg_reg_e'($urandom % 8); cd = CFG_W'($urandom);
      e = 1'($urandom); w = 1'($urandom); l = 1'($urandom); k = ($urandom % 8) != 0;
      link_cmd = c; link_row = r; link_col = col; link_cfg_reg = cr; link_cfg_data = cd;
      link_exp_ref = e; link_we = w; link_ld = l; link_cke = k;
      @(negedge clk);
      link_cmd = CMD_NOP;
      check(dec_act == (k && c == CMD_ACT), "act strobe");
      check(dec_rd  == (k && c == CMD_RD),  "rd strobe");
      check(dec_wr  == (k && c == CMD_WR),  "wr strobe");
      check(dec_pre == (k && c == CMD_PRE), "pre strobe");
      check(dec_ref == (k && c == CMD_REF), "ref strobe");
      check(cfg_we  == (c == CMD_CFG), "cfg strobe (also with cke low)");
      check(slot_valid == (k && c == CMD_SLOT), "slot strobe");
      check(ld == l && cke == k, "ld/cke");
      if (c == CMD_ACT) check(row_id == r, "row id");
      if (c == CMD_RD || c == CMD_WR) check(col_id == col, "col id");
      if (c == CMD_CFG) check(cfg_reg == cr && cfg_data == cd, "cfg fields");
      if (c == CMD_SLOT) check(slot_exp_ref == e && slot_we == w, "slot fields");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
