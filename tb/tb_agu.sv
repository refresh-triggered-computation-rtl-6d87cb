// tb_agu: checks the affine AGU.  For random rate, base and count it compares
// every address with base + i*rate (mod 2^ADDR_W), checks `last` on the final
// address, the wrap back to base, and `restart`.
module tb_agu;
  localparam int unsigned ADDR_W = 8;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  logic load_rate = 0, load_base = 0, load_count = 0, restart = 0, step = 0;
  logic [ADDR_W:0] cfg_data = '0;
  logic [ADDR_W-1:0] addr;
  logic last;
  int checks = 0, failures = 0;

  agu #(.ADDR_W(ADDR_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cfg(int rate, int base, int count);
    cfg_data = (ADDR_W+1)'(rate);  load_rate = 1;  @(negedge clk); load_rate = 0;
    cfg_data = (ADDR_W+1)'(count); load_count = 1; @(negedge clk); load_count = 0;
    cfg_data = (ADDR_W+1)'(base);  load_base = 1;  @(negedge clk); load_base = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 40; k++) begin
      int rate, base, count;
      rate  = $urandom % 8;
      base  = $urandom % (1 << ADDR_W);
      count = 1 + $urandom % 40;
      cfg(rate, base, count);
      for (int i = 0; i < 2 * count + 1; i++) begin
        int ii;
        ii = i % count;
        check(addr == ADDR_W'(base + ii * rate), $sformatf("rate %0d base %0d i %0d: addr %0d", rate, base, ii, addr));
        check(last == (ii == count - 1), $sformatf("last at i %0d of %0d", ii, count));
        step = 1; @(negedge clk); step = 0;
      end
      step = 1; @(negedge clk); step = 0;
      if (count > 1) begin
        restart = 1; @(negedge clk); restart = 0;
        check(addr == ADDR_W'(base), "restart returns to base");
      end
    end
    // full-range count (2^ADDR_W)
    cfg(1, 0, 1 << ADDR_W);
    for (int i = 0; i < (1 << ADDR_W); i++) begin
      check(addr == ADDR_W'(i) && last == (i == (1 << ADDR_W) - 1), "full range");
      step = 1; @(negedge clk); step = 0;
    end
    check(addr == 0, "full range wraps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
