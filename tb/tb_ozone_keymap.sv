// tb_ozone_keymap: the GDK key-mapping workload, run on the Ozone resource.
//
// GDK maps a keyboard code to a character by binary search over a sorted
// table. The table accesses depend on the key pressed, which is what a cache
// attack observes. The Ozone version here searches a table of 784 (code,
// character) pairs, padded by the OS to 1024 entries with all-ones codes. It
// always makes ten halving steps, and each step keeps or drops its probe with a
// conditional move instead of a branch:
//   lo = 0; for step in 512, 256, ..., 1: if (code[lo + step] <= q) lo += step
// The result is the character at lo. The testbench looks up every one of the
// 784 codes and checks the character and that every lookup takes the same 195
// cycles, worked out from the instruction latencies:
// 11 (setup) + 10 x 17 (loop) + 2 (loop-exit mispredict) + 12 (tail).
// Ends with a TB_RESULT line.
module tb_ozone_keymap;
  import ozone_pkg::*;
  import ozone_toy_isa_pkg::*;

  localparam int unsigned IAW = $clog2(ISPM_BYTES / 8), DAW = $clog2(DSPM_BYTES / 8);
  localparam int unsigned NKEYS = 784, NPAD = 1024;
  localparam int unsigned KEY_OFF = 'h0000, VAL_OFF = 'h2000, Q_OFF = 'h4000, R_OFF = 'h4008;
  localparam int unsigned EXPECT_CYC = 11 + 10 * 17 + 2 + 12;

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
    ctx_in.num_cycles = ncyc; ctx_in.ispm_size = 16'(ISPM_BYTES);
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
    while (!result_valid && cyc < 20000) begin
      if (core_start) t_start = cyc;
      if (core_done && t_done == 0) t_done = cyc - t_start;
      @(negedge clk); cyc++;
    end
    st = status; rv = retval; t_run = cyc - t_start;
  endtask



  logic [63:0] code_v [NKEYS], char_v [NKEYS];

  initial begin
    oz_status_e st;
    logic [63:0] rv, w;
    int unsigned t_run, t_done, pc, tmin, tmax, loop_pc;
    logic [63:0] c;
    tmin = '1; tmax = 0;

    // sorted codes with random gaps, random characters
    c = 64'h20;
    for (int i = 0; i < NKEYS; i++) begin
      c = c + 1 + ($urandom % 20);
      code_v[i] = c;
      char_v[i] = 64'($urandom % 32'h10FFFF);
    end

    repeat (3) @(negedge clk);
    rst_n = 1;

    // Ozone code: r1 base, r9 q+1, r4 lo, r3 step, r15 zero
    pc = 0;
    ispm_write(pc++, enc(OP_LI,   1, 0, 0, int'(DSPM_BASE[31:0])));
    ispm_write(pc++, enc(OP_LD,   9, 1, 0, Q_OFF));
    ispm_write(pc++, enc(OP_ADDI, 9, 9, 0, 1));
    ispm_write(pc++, enc(OP_LI,   4, 0, 0, 0));
    ispm_write(pc++, enc(OP_LI,   3, 0, 0, NPAD / 2));
    loop_pc = pc;
    ispm_write(pc++, enc(OP_ADD,  5, 4, 3, 0));        // probe = lo + step
    ispm_write(pc++, enc(OP_SHLI, 6, 5, 0, 3));
    ispm_write(pc++, enc(OP_ADD,  6, 6, 1, 0));
    ispm_write(pc++, enc(OP_LD,   7, 6, 0, KEY_OFF));  // code[probe]
    ispm_write(pc++, enc(OP_SLTU, 8, 7, 9, 0));        // code[probe] <= q
    ispm_write(pc++, enc(OP_CMOV, 4, 8, 5, 0));        // lo = probe if so
    ispm_write(pc++, enc(OP_SHRI, 3, 3, 0, 1));
    ispm_write(pc, enc(OP_BNE,  0, 3, 15, (int'(loop_pc) - int'(pc)) * 8));
    pc++;
    ispm_write(pc++, enc(OP_SHLI, 6, 4, 0, 3));
    ispm_write(pc++, enc(OP_ADD,  6, 6, 1, 0));
    ispm_write(pc++, enc(OP_LD,   0, 6, 0, VAL_OFF));  // r0 = char[lo]
    ispm_write(pc++, enc(OP_ST,   0, 1, 0, R_OFF));
    ispm_write(pc++, enc(OP_HALT, 0, 0, 0, 0));

    // table, padded to a power of two
    for (int i = 0; i < NPAD; i++) begin
      dspm_write(KEY_OFF + 8 * i, (i < NKEYS) ? code_v[i] : '1);
      if (i < NKEYS) dspm_write(VAL_OFF + 8 * i, char_v[i]);
    end

    thread_create(EXPECT_CYC, 'h4010);

    for (int i = 0; i < NKEYS; i++) begin
      dspm_write(Q_OFF, code_v[i]);
      thread_invoke(st, rv, t_run, t_done);
      check(st == ST_OK, $sformatf("code %0d returns", i));
      check(rv == char_v[i], $sformatf("code %0d maps to %h, got %h", i, char_v[i], rv));
      if (i % 97 == 0) begin
        dspm_read(R_OFF, w);
        check(w == char_v[i], "result stored in the DSPM");
      end
      if (t_done < tmin) tmin = t_done;
      if (t_done > tmax) tmax = t_done;
    end
    check(tmin == EXPECT_CYC && tmax == EXPECT_CYC,
          $sformatf("all lookups take %0d..%0d cycles, expected exactly %0d", tmin, tmax, EXPECT_CYC));
    $display("GDK keymap: %0d codes, cycles min=%0d max=%0d", NKEYS, tmin, tmax);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
