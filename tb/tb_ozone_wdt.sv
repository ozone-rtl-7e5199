// tb_ozone_wdt: self-checking test of the watchdog timer.
//
// Starts the timer with a range of budgets N and checks that `expire` rises in
// exactly the N-th cycle after the start edge (the 1st for N = 0), lasts one
// cycle, and that `running`/`remaining` follow; checks that `stop` aborts it and
// that a restart while running reloads it. Ends with a TB_RESULT line.
module tb_ozone_wdt;
  localparam int unsigned CYC_W = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, stop = 1'b0;
  logic [CYC_W-1:0] load_value = '0;
  logic running, expire;
  logic [CYC_W-1:0] remaining;
  int checks = 0, failures = 0;

  ozone_wdt #(.CYC_W(CYC_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // start with budget n and measure the cycle of expiry
  task automatic run_budget(input int unsigned n);
    int unsigned cyc, exp_cyc, expect_n;
    expect_n = (n == 0) ? 1 : n;
    @(negedge clk);
    start = 1'b1; load_value = n;
    @(negedge clk);
    start = 1'b0;
    cyc = 1; exp_cyc = 0;
    while (cyc <= expect_n + 3) begin
      if (cyc <= expect_n) check(running, $sformatf("N=%0d running in cycle %0d", n, cyc));
      if (cyc < expect_n && n != 0)
        check(remaining == n - cyc + 1, $sformatf("N=%0d remaining %0d in cycle %0d", n, remaining, cyc));
      if (expire) begin
        check(exp_cyc == 0, $sformatf("N=%0d expire twice", n));
        exp_cyc = cyc;
      end
      @(negedge clk);
      cyc++;
    end
    check(exp_cyc == expect_n, $sformatf("N=%0d expired in cycle %0d", n, exp_cyc));
    check(!running && remaining == 0, $sformatf("N=%0d idle after expiry", n));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(!running && !expire, "idle after reset");
    run_budget(1);
    run_budget(2);
    run_budget(5);
    run_budget(37);
    run_budget(0);
    for (int i = 0; i < 5; i++) run_budget(1 + ($urandom % 200));
    // stop aborts
    @(negedge clk); start = 1'b1; load_value = 20;
    @(negedge clk); start = 1'b0;
    repeat (5) @(negedge clk);
    stop = 1'b1;
    @(negedge clk); stop = 1'b0;
    check(!running, "stop aborts");
    repeat (30) begin
      check(!expire, "no expiry after stop");
      @(negedge clk);
    end
    // restart while running reloads
    @(negedge clk); start = 1'b1; load_value = 50;
    @(negedge clk); start = 1'b0;
    repeat (10) @(negedge clk);
    run_budget(4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
