// tb_ozone_ctrl: self-checking test of the invocation sequencer.
//
// Plays the core and the watchdog around the controller. For each invocation it
// picks a flush delay, a budget N and a completion cycle D, and checks: the mode
// bit, interrupt mask and thread stall are set from the cycle after invoke until
// expiry; flush_req is held until flush_done; one INIT cycle clears the state and
// starts core and WDT; the result comes exactly N + 1 cycles after the start
// edge, ST_OK with the return value if D == N and ST_TERMINATED otherwise; an
// early finisher is halted until expiry; an invoke with no context is refused.
// Ends with a TB_RESULT line.
module tb_ozone_ctrl;
  import ozone_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic invoke = 1'b0, ctx_valid = 1'b0;
  logic [31:0] num_cycles = '0;
  logic result_valid;
  oz_status_e status;
  logic [63:0] retval, ret_data = '0;
  logic ozone_mode, flush_req, flush_done, pred_init, state_clear, core_start;
  logic core_halt, core_kill, core_done, irq_mask, smt_stall;
  oz_state_e state;
  logic wdt_start, wdt_stop, wdt_expire;
  logic [31:0] wdt_load;
  int checks = 0, failures = 0;

  ozone_ctrl #(.STATIC_BP(1'b1), .XLEN_P(64), .CYC_W_P(32)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // watchdog and core stand-ins
  int unsigned wdt_cnt = 0, core_cyc = 0, done_at = 0, flush_wait = 0;
  bit wdt_on = 0, core_on = 0;
  assign wdt_expire = wdt_on && (wdt_cnt <= 1);
  assign core_done  = core_on && (core_cyc == done_at);
  assign flush_done = flush_req && (flush_wait == 0);
  always @(posedge clk) begin
    if (flush_req && flush_wait > 0) flush_wait <= flush_wait - 1;
    if (wdt_start) begin wdt_on <= 1; wdt_cnt <= wdt_load; end
    else if (wdt_expire) wdt_on <= 0;
    else if (wdt_on) wdt_cnt <= wdt_cnt - 1;
    if (core_start) begin core_on <= 1; core_cyc <= 1; end
    else if (core_kill) core_on <= 0;
    else if (core_on) core_cyc <= core_cyc + 1;
  end

  task automatic invoke_once(input int unsigned n, input int unsigned d, input int unsigned fl);
    int unsigned cyc, t_res, t_start;
    bit saw_halt_early;
    oz_status_e exp_st;
    logic [63:0] rv;
    rv = {$urandom, $urandom};
    exp_st = (d == n) ? ST_OK : ST_TERMINATED;
    num_cycles = n; done_at = d; flush_wait = fl;
    @(negedge clk);
    invoke = 1'b1;
    @(negedge clk);
    invoke = 1'b0;
    cyc = 0; t_res = 0; t_start = 0; saw_halt_early = 0;
    while (t_res == 0 && cyc < n + fl + 20) begin
      if (cyc == 0) check(ozone_mode && irq_mask && smt_stall, "mode set after invoke");
      if (cyc < fl) check(flush_req && !core_start, "flushing");
      if (core_start) begin
        check(t_start == 0 && state_clear && wdt_start && wdt_load == n && !pred_init,
              "INIT: clear, start WDT, no predictor init");
        check(!flush_req, "flush done before start");
        t_start = cyc;
      end
      if (core_on && core_cyc == n) ret_data = rv;
      if (core_halt) begin
        check(core_on && core_cyc > d && d < n, "halt only after an early finish");
        saw_halt_early = 1;
      end
      if (result_valid) t_res = cyc;
      else if (t_start != 0) check(ozone_mode, "mode held during the run");
      @(negedge clk);
      cyc++;
    end
    check(t_start == fl + 1, $sformatf("start after %0d flush wait cycles (got %0d)", fl, t_start));
    check(t_res - t_start == n + 1, $sformatf("N=%0d D=%0d: result %0d cycles after start", n, d, t_res - t_start));
    check(status == exp_st, $sformatf("N=%0d D=%0d: status %s", n, d, status.name()));
    if (exp_st == ST_OK) check(retval == rv, "return value");
    else                 check(retval == 0, "no value when terminated");
    if (d < n) check(saw_halt_early, "early finisher halted");
    check(!ozone_mode && !irq_mask && !smt_stall && state == OZ_IDLE, "mode cleared after the run");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // no context
    @(negedge clk); invoke = 1'b1;
    @(negedge clk); invoke = 1'b0;
    check(result_valid && status == ST_NOCTX && !ozone_mode, "invoke without context refused");
    ctx_valid = 1'b1;
    invoke_once(10, 10, 0);
    invoke_once(10, 9, 3);
    invoke_once(10, 11, 1);
    invoke_once(1, 1, 2);
    for (int i = 0; i < 30; i++) begin
      automatic int unsigned n = 2 + $urandom % 60;
      automatic int unsigned k = $urandom % 3;
      invoke_once(n, (k == 0) ? n : (k == 1) ? 1 + $urandom % (n - 1) : n + 1 + $urandom % 5,
                  $urandom % 6);
    end
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
