// tb_rate_matcher: checks the rate matcher against a software model of the
// paper's Algorithm 1, for the paper's N_r=4, N_a=2 example, corner cases
// (N_a >= N_r, N_a = 0) and random pairs.  It checks P = N_r/gcd(N_r,N_a),
// every exp_ref decision over three periods, the number of explicit
// refreshes per period ((N_r-N_a)/gcd), and that reconfiguration finishes
// within 100 cycles.
module tb_rate_matcher;
  localparam int unsigned CNT_W = 17;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  logic load_nr = 0, load_na = 0, restart = 0, step = 0;
  logic [CNT_W-1:0] cfg_data = '0;
  logic exp_ref, ready;
  logic [CNT_W-1:0] period_p, n_r, n_a;
  int checks = 0, failures = 0;

  rate_matcher #(.CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint gcd(longint a, longint b);
    while (b != 0) begin longint t = a % b; a = b; b = t; end
    return a;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_pair(longint nr, longint na, int periods);
    longint p, c, expl;
    int cyc;
    @(negedge clk); cfg_data = CNT_W'(nr); load_nr = 1;
    @(negedge clk); load_nr = 0;
    cyc = 0;
    while (!ready) begin @(negedge clk); cyc++; end
    cfg_data = CNT_W'(na); load_na = 1;
    @(negedge clk); load_na = 0;
    cyc = 0;
    while (!ready) begin @(negedge clk); cyc++; end
    check(cyc <= 100, $sformatf("config latency %0d cycles for Nr=%0d Na=%0d", cyc, nr, na));
    p = (nr <= na) ? 1 : nr / gcd(nr, na);
    check(period_p == CNT_W'(p), $sformatf("P=%0d expected %0d (Nr=%0d Na=%0d)", period_p, p, nr, na));
    // model
    for (int per = 0; per < periods; per++) begin
      c = nr; expl = 0;
      for (longint i = 0; i < p; i++) begin
        bit e;
        if (nr <= na) e = 0;
        else if (c > nr - na) begin e = 0; c = c - (nr - na); end
        else begin e = 1; c = c + na; end
        expl += e;
        check(exp_ref == e, $sformatf("Nr=%0d Na=%0d slot %0d: exp_ref=%0d expected %0d", nr, na, i, exp_ref, e));
        step = 1; @(negedge clk); step = 0;
      end
      if (nr > na)
        check(expl == (nr - na) / gcd(nr, na), $sformatf("explicit per period %0d", expl));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // the paper's example: N_r=4, N_a=2 alternates implicit / explicit
    run_pair(4, 2, 3);
    run_pair(12, 8, 3);
    run_pair(7, 3, 3);
    run_pair(5, 5, 2);
    run_pair(3, 7, 2);
    run_pair(10, 0, 2);
    run_pair(0, 0, 2);
    run_pair(64, 48, 2);
    run_pair(65536, 65535, 0);   // full bank, large P (check P only)
    for (int k = 0; k < 30; k++) begin
      longint nr, na;
      nr = 1 + ($urandom % 300);
      na = $urandom % 320;
      run_pair(nr, na, 2);
    end
    // restart reloads the credit mid-pattern
    run_pair(4, 1, 0);
    step = 1; @(negedge clk); step = 0;
    restart = 1; @(negedge clk); restart = 0;
    check(exp_ref == 0, "after restart first slot of 4/1 is implicit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
