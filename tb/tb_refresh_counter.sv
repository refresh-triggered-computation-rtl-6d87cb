// tb_refresh_counter: checks the configurable refresh counter.  After reset
// it must walk the whole row space; after a start/end load it must visit
// exactly the rows start..end in order and wrap, never leaving the range.
module tb_refresh_counter;
  localparam int unsigned ROW_W = 6;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  logic load_start = 0, load_end = 0, step = 0;
  logic [ROW_W-1:0] cfg_row = '0;
  logic [ROW_W-1:0] row, start_row, end_row;
  logic wrap;
  int checks = 0, failures = 0;

  refresh_counter #(.ROW_W(ROW_W)) dut (.*);
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

  task automatic walk(int s, int e, int n);
    int exp_row = s;
    for (int i = 0; i < n; i++) begin
      check(row == ROW_W'(exp_row), $sformatf("range %0d..%0d step %0d: row %0d expected %0d", s, e, i, row, exp_row));
      check(wrap == (exp_row == e), $sformatf("wrap at row %0d", row));
      step = 1; @(negedge clk); step = 0;
      exp_row = (exp_row == e) ? s : exp_row + 1;
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    walk(0, (1 << ROW_W) - 1, 2 * (1 << ROW_W) + 3);
    for (int k = 0; k < 20; k++) begin
      int s, e;
      s = $urandom % (1 << ROW_W);
      e = s + ($urandom % ((1 << ROW_W) - s));
      cfg_row = ROW_W'(s); load_start = 1; @(negedge clk); load_start = 0;
      cfg_row = ROW_W'(e); load_end = 1;   @(negedge clk); load_end = 0;
      check(start_row == ROW_W'(s) && end_row == ROW_W'(e), "range registers");
      walk(s, e, 2 * (e - s + 1) + 2);
    end
    // shrinking the end below the pointer moves the pointer to start
    cfg_row = 6'd10; load_start = 1; @(negedge clk); load_start = 0;
    cfg_row = 6'd20; load_end = 1;   @(negedge clk); load_end = 0;
    repeat (8) begin step = 1; @(negedge clk); step = 0; end
    cfg_row = 6'd15; load_end = 1;   @(negedge clk); load_end = 0;
    check(row == 6'd10, "pointer back to start after end shrink");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
