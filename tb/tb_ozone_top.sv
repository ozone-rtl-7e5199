// tb_ozone_top: end-to-end test of the Ozone resource at its full default size.
//
// The testbench plays the OS and the application; a behavioural core
// (ozone_core_model) executes the Ozone code. The OS loads a constant-time
// table lookup into the ISPM: for i in 0..15 it loads table[i] and keeps it with
// a conditional move when i equals the secret index k, then stores the result
// and returns it. Every run walks the whole table, so its length does not
// depend on k. The expected length is worked out from the instruction
// latencies: 13 cycles of setup, 16 iterations of 15 cycles, 2 cycles for the
// final, mispredicted loop exit, 3 + 2 for the store and the move of the result
// and 2 for HALT: 262 cycles.
//
// Checked: the first run, with a loose budget, finishes early and is
// terminated, giving the measured length; runs with the exact budget return
// table[k] for random tables and secrets, always exactly the same number of
// cycles after the start; budgets one cycle short or long are terminated; the
// result also lands in the DSPM; a context whose data window leaves out the
// table makes the loads fault without changing the timing; the host is refused
// while Ozone mode is on; the main predictor receives no update and the caches
// no request during Ozone runs, but both are used by the normal thread; an
// invoke after destroy is refused. Each mechanism is counted and must occur.
// Ends with a TB_RESULT line.
module tb_ozone_top;
  import ozone_pkg::*;
  import ozone_toy_isa_pkg::*;

  localparam int unsigned EXPECT_CYC = 13 + 16 * 15 + 2 + 3 + 2 + 2;
  localparam int unsigned TABLE_OFF  = 'h100;
  localparam int unsigned IAW = $clog2(ISPM_BYTES / 8), DAW = $clog2(DSPM_BYTES / 8);

  logic clk = 1'b0, rst_n = 1'b0;
  logic create = 0, destroy = 0, invoke = 0;
  ozone_ctx_t ctx_in = '0;
  logic ctx_valid, result_valid;
  oz_status_e status;
  logic [63:0] retval;
  logic ih_req = 0, ih_we = 0; logic [IAW-1:0] ih_addr = '0; logic [63:0] ih_wdata = '0, ih_rdata; logic ih_err;
  logic dh_req = 0, dh_we = 0; logic [7:0] dh_be = 8'hFF; logic [DAW-1:0] dh_addr = '0;
  logic [63:0] dh_wdata = '0, dh_rdata; logic dh_err;
  logic ozone_mode, flush_req, flush_done, pred_init, core_start, core_halt, core_kill, core_done;
  logic irq_mask, smt_stall;
  logic [14:0] entry_pc;
  logic cf_req, cf_rvalid, cd_req, cd_we, cd_rvalid, addr_fault;
  logic [63:0] cf_addr, cf_rdata, cd_addr, cd_wdata, cd_rdata;
  logic [7:0] cd_be;
  logic [RA_W-1:0] rf_ra1, rf_ra2, rf_wa;
  logic [63:0] rf_rd1, rf_rd2, rf_wd;
  logic rf_we, br_valid, pred_taken, main_upd_in, main_upd_out;
  logic [63:0] br_target, pred_target;
  logic main_taken = 1'b0; logic [63:0] main_target = '0;
  logic ic_req, dc_req, dc_we; logic [63:0] ic_addr, dc_addr, dc_wdata; logic [7:0] dc_be;
  logic [63:0] ic_rdata = '0, dc_rdata = '0; logic ic_rvalid = 0, dc_rvalid = 0;
  logic [CYC_W-1:0] wdt_remaining;
  logic nt_req = 0; logic [63:0] nt_addr = 64'h1000;
  logic mispredict;

  ozone_top dut (.*);

  ozone_core_model core (
    .clk, .rst_n, .ozone_mode, .flush_req, .flush_done, .core_start, .entry_pc,
    .core_halt, .core_kill, .core_done, .cf_req, .cf_addr, .cf_rdata,
    .cd_req, .cd_we, .cd_be, .cd_addr, .cd_wdata, .cd_rdata,
    .rf_ra1, .rf_rd1, .rf_ra2, .rf_rd2, .rf_we, .rf_wa, .rf_wd,
    .br_valid, .br_target, .pred_taken, .main_upd_in, .nt_req, .nt_addr, .mispredict
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // mechanism counters
  int n_flush = 0, n_mode_on = 0, n_ok = 0, n_term_early = 0, n_term_late = 0, n_noctx = 0;
  int n_mispredict = 0, n_upd_blocked = 0, n_host_refused = 0;
  int n_cache_normal = 0, n_fault = 0, n_halt = 0;
  logic mode_q = 0;
  always @(posedge clk) if (rst_n) begin
    mode_q <= ozone_mode;
    if (ozone_mode && !mode_q) n_mode_on++;
    if (flush_req && flush_done) n_flush++;
    if (mispredict && ozone_mode) n_mispredict++;
    if (ozone_mode && main_upd_in) begin
      n_upd_blocked++;
      if (main_upd_out) begin failures++; $display("FAIL: main predictor updated in Ozone mode"); end
    end
    if (ozone_mode && (ic_req || dc_req)) begin failures++; $display("FAIL: cache used in Ozone mode"); end
    if (!ozone_mode && dc_req && dc_addr == nt_addr) n_cache_normal++;
    if (ih_err || dh_err) n_host_refused++;
    if (addr_fault) n_fault++;
    if (core_halt && !$past(core_halt)) n_halt++;
    if (ozone_mode) check(irq_mask && smt_stall, "interrupts masked, threads stalled");
  end

  // ---- OS helpers ----
  task automatic ispm_write(input int unsigned w, input logic [63:0] d);
    @(negedge clk); ih_req = 1; ih_we = 1; ih_addr = IAW'(w); ih_wdata = d;
    @(negedge clk); ih_req = 0; ih_we = 0;
  endtask
  task automatic dspm_write(input int unsigned byte_off, input logic [63:0] d);
    @(negedge clk); dh_req = 1; dh_we = 1; dh_addr = DAW'(byte_off / 8); dh_wdata = d;
    @(negedge clk); dh_req = 0; dh_we = 0;
  endtask
  task automatic dspm_read(input int unsigned byte_off, output logic [63:0] d);
    @(negedge clk); dh_req = 1; dh_we = 0; dh_addr = DAW'(byte_off / 8);
    @(negedge clk); dh_req = 0; d = dh_rdata;
  endtask
  task automatic thread_create(input int unsigned ncyc, input int unsigned dsize);
    @(negedge clk);
    ctx_in.num_cycles = ncyc; ctx_in.ispm_size = 16'(16 * 8);
    ctx_in.dspm_size = 17'(dsize); ctx_in.entry_pc = '0;
    create = 1;
    @(negedge clk); create = 0;
  endtask

  // invoke and wait; returns status, value and the cycles from start to result
  task automatic thread_invoke(output oz_status_e st, output logic [63:0] rv,
                               output int unsigned t_run, output int unsigned t_done);
    int unsigned cyc = 0, t_start = 0;
    t_done = 0;
    @(negedge clk); invoke = 1;
    @(negedge clk); invoke = 0;
    while (!result_valid && cyc < 2000) begin
      if (core_start) t_start = cyc;
      if (core_done && t_done == 0) t_done = cyc - t_start;
      // host access attempt in the middle of the run
      if (cyc == 20) begin dh_req = 1; dh_we = 1; dh_addr = '0; dh_wdata = '1; end
      else begin dh_req = 0; dh_we = 0; end
      @(negedge clk); cyc++;
    end
    dh_req = 0; dh_we = 0;
    st = status; rv = retval; t_run = cyc - t_start;
  endtask

  logic [63:0] table_v [16];
  task automatic load_data(input int unsigned k);
    dspm_write(0, 64'(k));
    dspm_write(8, 64'hFFFF_FFFF_FFFF_FFFF);
    for (int i = 0; i < 16; i++) begin
      table_v[i] = {$urandom, $urandom};
      dspm_write(TABLE_OFF + 8 * i, table_v[i]);
    end
  endtask

  initial begin
    oz_status_e st;
    logic [63:0] rv, mem_rv;
    int unsigned t_run, t_done, k, measured;

    repeat (3) @(negedge clk);
    rst_n = 1;

    // OS: load the Ozone code into the ISPM
    ispm_write(0,  enc(OP_LI,   1, 0, 0, int'(DSPM_BASE[31:0])));
    ispm_write(1,  enc(OP_LD,   2, 1, 0, 0));          // r2 = secret k
    ispm_write(2,  enc(OP_LI,   3, 0, 0, 0));          // r3 = i
    ispm_write(3,  enc(OP_LI,   4, 0, 0, 16));         // r4 = 16
    ispm_write(4,  enc(OP_LI,   5, 0, 0, 0));          // r5 = acc
    ispm_write(5,  enc(OP_LI,   6, 0, 0, TABLE_OFF));  // r6 = table offset
    ispm_write(6,  enc(OP_ADD,  7, 1, 6, 0));          // loop: r7 = &table[i]
    ispm_write(7,  enc(OP_LD,   8, 7, 0, 0));          // r8 = table[i]
    ispm_write(8,  enc(OP_SEQ,  9, 3, 2, 0));          // r9 = (i == k)
    ispm_write(9,  enc(OP_CMOV, 5, 9, 8, 0));          // if (r9) acc = table[i]
    ispm_write(10, enc(OP_ADDI, 3, 3, 0, 1));
    ispm_write(11, enc(OP_ADDI, 6, 6, 0, 8));
    ispm_write(12, enc(OP_BNE,  0, 3, 4, -6 * 8));
    ispm_write(13, enc(OP_ST,   0, 1, 5, 8));          // result -> DSPM[8]
    ispm_write(14, enc(OP_ADD,  0, 5, 15, 0));         // r0 = acc (r15 is 0)
    ispm_write(15, enc(OP_HALT, 0, 0, 0, 0));

    // invoke before any thread exists
    @(negedge clk); invoke = 1;
    @(negedge clk); invoke = 0;
    if (result_valid && status == ST_NOCTX) n_noctx++;
    check(status == ST_NOCTX, "invoke without a thread refused");

    // 1. loose budget: measure, expect termination (finished too early)
    k = 5;
    load_data(k);
    thread_create(1000, TABLE_OFF + 16 * 8);
    thread_invoke(st, rv, t_run, t_done);
    measured = t_done;
    check(st == ST_TERMINATED && rv == 0, "early finish is terminated");
    if (st == ST_TERMINATED) n_term_early++;
    check(t_run == 1000 + 1, $sformatf("terminated run still lasts the budget (%0d)", t_run));
    check(measured == EXPECT_CYC, $sformatf("Ozone code length %0d, expected %0d", measured, EXPECT_CYC));

    // 2. exact budget: many secrets and tables, identical timing
    thread_create(EXPECT_CYC, TABLE_OFF + 16 * 8);
    for (int r = 0; r < 12; r++) begin
      k = $urandom % 16;
      load_data(k);
      thread_invoke(st, rv, t_run, t_done);
      check(st == ST_OK, $sformatf("run %0d k=%0d returns", r, k));
      if (st == ST_OK) n_ok++;
      check(rv == table_v[k], $sformatf("run %0d returns table[%0d]", r, k));
      check(t_run == EXPECT_CYC + 1 && t_done == EXPECT_CYC,
            $sformatf("run %0d timing %0d/%0d independent of data", r, t_run, t_done));
      dspm_read(8, mem_rv);
      check(mem_rv == table_v[k], "result stored in the DSPM");
    end

    // 3. budget one short: the code is still running at expiry
    thread_create(EXPECT_CYC - 1, TABLE_OFF + 16 * 8);
    thread_invoke(st, rv, t_run, t_done);
    check(st == ST_TERMINATED && t_run == EXPECT_CYC, "too-short budget terminated");
    if (st == ST_TERMINATED) n_term_late++;

    // 4. budget one long
    thread_create(EXPECT_CYC + 1, TABLE_OFF + 16 * 8);
    thread_invoke(st, rv, t_run, t_done);
    check(st == ST_TERMINATED && t_run == EXPECT_CYC + 2, "too-long budget terminated");

    // 5. data window without the table: loads fault and read zero, timing unchanged
    k = 3;
    load_data(k);
    thread_create(EXPECT_CYC, TABLE_OFF);
    thread_invoke(st, rv, t_run, t_done);
    check(st == ST_OK && rv == 0 && t_done == EXPECT_CYC, "faulting loads read zero, same timing");

    // 6. normal thread: caches and main predictor in use again
    @(negedge clk); nt_req = 1;
    @(negedge clk); nt_req = 0;
    check(n_cache_normal == 1, "normal-thread load goes to the data cache");
    check(!ozone_mode, "normal mode");

    // 7. destroy, then invoke is refused
    @(negedge clk); destroy = 1;
    @(negedge clk); destroy = 0;
    @(negedge clk); invoke = 1;
    @(negedge clk); invoke = 0;
    if (result_valid && status == ST_NOCTX) n_noctx++;
    check(status == ST_NOCTX, "invoke after destroy refused");

    // every mechanism must have happened
    check(n_flush > 0,        "pipeline flush happened");
    check(n_mode_on > 0,      "Ozone mode switch happened");
    check(n_ok > 0,           "exact-budget return happened");
    check(n_term_early > 0,   "early termination happened");
    check(n_term_late > 0,    "late termination happened");
    check(n_halt > 0,         "early finisher halted");
    check(n_noctx == 2,       "missing-context refusal happened");
    check(n_mispredict > 0,   "always-taken mispredict on loop exit happened");
    check(n_upd_blocked > 0,  "main predictor update blocked");
    check(n_host_refused > 0, "host refused in Ozone mode");
    check(n_cache_normal > 0, "cache used by the normal thread");
    check(n_fault > 0,        "out-of-window access flagged");
    $display("mechanisms: flush=%0d mode=%0d ok=%0d early=%0d late=%0d halt=%0d noctx=%0d mispredict=%0d upd_blocked=%0d host_refused=%0d cache=%0d fault=%0d",
             n_flush, n_mode_on, n_ok, n_term_early, n_term_late, n_halt, n_noctx, n_mispredict,
             n_upd_blocked, n_host_refused, n_cache_normal, n_fault);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
