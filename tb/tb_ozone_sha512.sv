// tb_ozone_sha512: SHA-512 password hashing, run on the Ozone resource.
//
// A plain SHA-512 does work in proportion to the message length, and that
// leaks the length of a password. The Ozone code here always does the
// worst-case work for inputs of 1 to 128 bytes. It builds both 1024-bit blocks
// of the padded message byte by byte with conditional moves: message byte if
// i < len, 0x80 if i == len, else 0. The bit length goes into word 15 or word
// 31, chosen by a conditional move on len < 112. It compresses both blocks and
// finally selects the digest after block 1 or after block 2, again with
// conditional moves. Message bytes come one per 64-bit word; the digest is
// stored as eight words and word 0 is returned.
//
// The testbench computes the round constants and the initial hash from the
// first 80 primes (integer cube and square roots), checks them and a reference
// SHA-512 against known values, then hashes random passwords of every length
// from 1 to 128 bytes. The digests must match the reference, and every run
// must take the same number of cycles. That number is counted from the
// instruction latencies of the generated code and its fixed trip counts.
// Ends with a TB_RESULT line.
module tb_ozone_sha512;
  import ozone_pkg::*;
  import ozone_toy_isa_pkg::*;

  localparam int unsigned IAW = $clog2(ISPM_BYTES / 8), DAW = $clog2(DSPM_BYTES / 8);
  localparam int MSG_OFF = 'h000, LEN_OFF = 'h400, SHORT_OFF = 'h408, K_OFF = 'h800,
                 H0_OFF = 'hC00, HW_OFF = 'hC40, HB_OFF = 'hC80, OUT_OFF = 'hD00,
                 M_OFF = 'h1000, W_OFF = 'h1200, DSIZE = 'h1480;

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
    while (!result_valid && cyc < 200000) begin
      if (core_start) t_start = cyc;
      if (core_done && t_done == 0) t_done = cyc - t_start;
      @(negedge clk); cyc++;
    end
    st = status; rv = retval; t_run = cyc - t_start;
  endtask



  // ---- constants from the primes ----
  logic [63:0] kc [80], h0c [8];
  function automatic logic [255:0] icbrt(input logic [255:0] n);
    logic [255:0] r = 0, t;
    for (int b = 80; b >= 0; b--) begin
      t = r | (256'd1 << b);
      if (t * t * t <= n) r = t;
    end
    return r;
  endfunction
  function automatic logic [255:0] isqrt(input logic [255:0] n);
    logic [255:0] r = 0, t;
    for (int b = 100; b >= 0; b--) begin
      t = r | (256'd1 << b);
      if (t * t <= n) r = t;
    end
    return r;
  endfunction
  task automatic build_consts();
    int primes [$];
    logic [255:0] r;
    for (int c = 2; primes.size() < 80; c++) begin
      automatic bit is_p = 1;
      foreach (primes[i]) if (c % primes[i] == 0) is_p = 0;
      if (is_p) primes.push_back(c);
    end
    for (int t = 0; t < 80; t++) begin
      r = icbrt(256'(primes[t]) << 192);
      kc[t] = r[63:0];
    end
    for (int i = 0; i < 8; i++) begin
      r = isqrt(256'(primes[i]) << 128);
      h0c[i] = r[63:0];
    end
  endtask

  // ---- reference SHA-512 ----
  function automatic logic [63:0] rotr(input logic [63:0] x, input int n);
    return (x >> n) | (x << (64 - n));
  endfunction
  typedef logic [63:0] dig_t [8];
  function automatic dig_t sha512_ref(input logic [7:0] msg [], input int len);
    logic [7:0] b [$];
    logic [63:0] w [80], h [8], a [8], t1, t2;
    for (int i = 0; i < len; i++) b.push_back(msg[i]);
    b.push_back(8'h80);
    while (b.size() % 128 != 112) b.push_back(8'h00);
    for (int i = 0; i < 8; i++) b.push_back(8'h00);
    for (int i = 7; i >= 0; i--) b.push_back(8'(64'(len * 8) >> (8 * i)));
    h = h0c;
    for (int blk = 0; blk < b.size() / 128; blk++) begin
      for (int t = 0; t < 16; t++)
        for (int j = 0; j < 8; j++) w[t] = {w[t][55:0], b[128 * blk + 8 * t + j]};
      for (int t = 16; t < 80; t++)
        w[t] = (rotr(w[t-2], 19) ^ rotr(w[t-2], 61) ^ (w[t-2] >> 6)) + w[t-7] +
               (rotr(w[t-15], 1) ^ rotr(w[t-15], 8) ^ (w[t-15] >> 7)) + w[t-16];
      a = h;
      for (int t = 0; t < 80; t++) begin
        t1 = a[7] + (rotr(a[4], 14) ^ rotr(a[4], 18) ^ rotr(a[4], 41)) +
             ((a[4] & a[5]) ^ (~a[4] & a[6])) + kc[t] + w[t];
        t2 = (rotr(a[0], 28) ^ rotr(a[0], 34) ^ rotr(a[0], 39)) +
             ((a[0] & a[1]) ^ (a[0] & a[2]) ^ (a[1] & a[2]));
        a[7] = a[6]; a[6] = a[5]; a[5] = a[4]; a[4] = a[3] + t1;
        a[3] = a[2]; a[2] = a[1]; a[1] = a[0]; a[0] = t1 + t2;
      end
      for (int i = 0; i < 8; i++) h[i] += a[i];
    end
    return h;
  endfunction

  // ---- code generation with a static cycle count ----
  int unsigned pc = 0, trip = 1, loop_pc = 0;
  longint unsigned cost = 0;
  task automatic emit(input ozone_toy_isa_pkg::op_e o, input int rd, input int rs1, input int rs2, input int imm);
    ispm_write(pc, enc(o, rd, rs1, rs2, imm));
    pc++;
    cost += trip * ((o == OP_LD || o == OP_ST) ? 3 : 2);
  endtask
  task automatic loop_begin(input int unsigned n);
    loop_pc = pc; trip = n;
  endtask
  task automatic loop_end(input int rs1, input int rs2);
    emit(OP_BNE, 0, rs1, rs2, (int'(loop_pc) - int'(pc)) * 8);
    cost += 2;  // the loop exit is predicted taken and costs two bubbles
    trip = 1;
  endtask
  // Sigma helpers: dst = rotr(x,a) ^ rotr(x,b) ^ (c >= 64 ? x >> (c-64) : rotr(x,c))
  task automatic big_sigma(input int dst, input int tmp, input int x, input int ra, input int rb, input int rc);
    emit(OP_SHRI, dst, x, 0, ra);       emit(OP_SHLI, tmp, x, 0, 64 - ra); emit(OP_XOR, dst, dst, tmp, 0);
    emit(OP_SHRI, tmp, x, 0, rb);       emit(OP_XOR, dst, dst, tmp, 0);
    emit(OP_SHLI, tmp, x, 0, 64 - rb);  emit(OP_XOR, dst, dst, tmp, 0);
    emit(OP_SHRI, tmp, x, 0, rc);       emit(OP_XOR, dst, dst, tmp, 0);
    emit(OP_SHLI, tmp, x, 0, 64 - rc);  emit(OP_XOR, dst, dst, tmp, 0);
  endtask
  task automatic small_sigma(input int dst, input int tmp, input int x, input int ra, input int rb, input int sh);
    emit(OP_SHRI, dst, x, 0, ra);       emit(OP_SHLI, tmp, x, 0, 64 - ra); emit(OP_XOR, dst, dst, tmp, 0);
    emit(OP_SHRI, tmp, x, 0, rb);       emit(OP_XOR, dst, dst, tmp, 0);
    emit(OP_SHLI, tmp, x, 0, 64 - rb);  emit(OP_XOR, dst, dst, tmp, 0);
    emit(OP_SHRI, tmp, x, 0, sh);       emit(OP_XOR, dst, dst, tmp, 0);
  endtask

  function automatic int rg(input int k, input int rr);  // register of variable k (a=0..h=7) in round rr
    return 2 + ((k - rr + 8) % 8);
  endfunction

  task automatic gen_program();
    // A. padded message, 16 words of block 0 built byte by byte
    emit(OP_LI, 1, 0, 0, int'(DSPM_BASE[31:0]));
    emit(OP_LD, 3, 1, 0, LEN_OFF);
    emit(OP_LI, 2, 0, 0, 0);
    emit(OP_LI, 4, 0, 0, 'h80);
    emit(OP_ADD, 10, 1, 15, 0);
    emit(OP_LI, 11, 0, 0, M_OFF);   emit(OP_ADD, 11, 11, 1, 0);
    emit(OP_LI, 12, 0, 0, 128);
    loop_begin(16);
    for (int b = 0; b < 8; b++) begin
      emit(OP_LD,   6, 10, 0, MSG_OFF);
      emit(OP_SLTU, 7, 2, 3, 0);
      emit(OP_LI,   8, 0, 0, 0);
      emit(OP_CMOV, 8, 7, 6, 0);
      emit(OP_SEQ,  9, 2, 3, 0);
      emit(OP_CMOV, 8, 9, 4, 0);
      emit(OP_SHLI, 5, 5, 0, 8);
      emit(OP_XOR,  5, 5, 8, 0);
      emit(OP_ADDI, 2, 2, 0, 1);
      emit(OP_ADDI, 10, 10, 0, 8);
    end
    emit(OP_ST, 0, 11, 5, 0);
    emit(OP_ADDI, 11, 11, 0, 8);
    loop_end(2, 12);
    // length placement and block 1
    emit(OP_LI, 7, 0, 0, 112);      emit(OP_SLTU, 7, 3, 7, 0);     // short = len < 112
    emit(OP_ST, 0, 1, 7, SHORT_OFF);
    emit(OP_SHLI, 8, 3, 0, 3);                                   // L = 8 * len
    emit(OP_LI, 9, 0, 0, 0);        emit(OP_CMOV, 9, 7, 8, 0);
    emit(OP_LD, 5, 1, 0, M_OFF + 15 * 8);
    emit(OP_XOR, 5, 5, 9, 0);
    emit(OP_ST, 0, 1, 5, M_OFF + 15 * 8);
    emit(OP_LI, 6, 0, 0, 'h80);     emit(OP_SHLI, 6, 6, 0, 56);
    emit(OP_SEQ, 9, 3, 12, 0);
    emit(OP_LI, 5, 0, 0, 0);        emit(OP_CMOV, 5, 9, 6, 0);
    emit(OP_ST, 0, 1, 5, M_OFF + 16 * 8);
    for (int w = 17; w < 31; w++) emit(OP_ST, 0, 1, 15, M_OFF + 8 * w);
    emit(OP_ADD, 9, 8, 15, 0);      emit(OP_CMOV, 9, 7, 15, 0);
    emit(OP_ST, 0, 1, 9, M_OFF + 31 * 8);
    // B. chaining value = initial hash
    for (int i = 0; i < 8; i++) begin
      emit(OP_LD, 2, 1, 0, H0_OFF + 8 * i);
      emit(OP_ST, 0, 1, 2, HW_OFF + 8 * i);
    end
    // C. both blocks
    for (int blk = 0; blk < 2; blk++) begin
      emit(OP_LI, 2, 0, 0, M_OFF + 128 * blk);  emit(OP_ADD, 2, 2, 1, 0);
      emit(OP_LI, 3, 0, 0, W_OFF);              emit(OP_ADD, 3, 3, 1, 0);
      emit(OP_LI, 7, 0, 0, W_OFF + 128);        emit(OP_ADD, 7, 7, 1, 0);
      loop_begin(16);
      emit(OP_LD, 4, 2, 0, 0);
      emit(OP_ST, 0, 3, 4, 0);
      emit(OP_ADDI, 2, 2, 0, 8);
      emit(OP_ADDI, 3, 3, 0, 8);
      loop_end(3, 7);
      emit(OP_ADD, 2, 3, 15, 0);
      emit(OP_LI, 7, 0, 0, W_OFF + 640);        emit(OP_ADD, 7, 7, 1, 0);
      loop_begin(64);
      emit(OP_LD, 3, 2, 0, -16);
      small_sigma(4, 5, 3, 19, 61, 6);
      emit(OP_LD, 3, 2, 0, -56);                emit(OP_ADD, 4, 4, 3, 0);
      emit(OP_LD, 3, 2, 0, -120);
      small_sigma(5, 6, 3, 1, 8, 7);
      emit(OP_ADD, 4, 4, 5, 0);
      emit(OP_LD, 3, 2, 0, -128);               emit(OP_ADD, 4, 4, 3, 0);
      emit(OP_ST, 0, 2, 4, 0);
      emit(OP_ADDI, 2, 2, 0, 8);
      loop_end(2, 7);
      for (int i = 0; i < 8; i++) emit(OP_LD, 2 + i, 1, 0, HW_OFF + 8 * i);
      emit(OP_ADD, 10, 1, 15, 0);
      emit(OP_LI, 14, 0, 0, 640);               emit(OP_ADD, 14, 14, 1, 0);
      loop_begin(10);
      for (int rr = 0; rr < 8; rr++) begin
        int a, b, c, d, e, f, g, h;
        a = rg(0, rr); b = rg(1, rr); c = rg(2, rr); d = rg(3, rr);
        e = rg(4, rr); f = rg(5, rr); g = rg(6, rr); h = rg(7, rr);
        big_sigma(11, 12, e, 14, 18, 41);
        emit(OP_XOR, 12, f, g, 0);  emit(OP_AND, 12, 12, e, 0);  emit(OP_XOR, 12, 12, g, 0);
        emit(OP_ADD, 11, 11, 12, 0);
        emit(OP_LD, 12, 10, 0, K_OFF);  emit(OP_ADD, 11, 11, 12, 0);
        emit(OP_LD, 12, 10, 0, W_OFF);  emit(OP_ADD, 11, 11, 12, 0);
        emit(OP_ADD, h, h, 11, 0);      // h = T1
        emit(OP_ADD, d, d, h, 0);       // new e
        big_sigma(11, 12, a, 28, 34, 39);
        emit(OP_XOR, 12, a, b, 0);  emit(OP_AND, 12, 12, c, 0);
        emit(OP_AND, 13, a, b, 0);  emit(OP_XOR, 12, 12, 13, 0);
        emit(OP_ADD, 11, 11, 12, 0);
        emit(OP_ADD, h, h, 11, 0);      // new a
        emit(OP_ADDI, 10, 10, 0, 8);
      end
      loop_end(10, 14);
      for (int i = 0; i < 8; i++) begin
        emit(OP_LD, 11, 1, 0, HW_OFF + 8 * i);
        emit(OP_ADD, 11, 11, 2 + i, 0);
        emit(OP_ST, 0, 1, 11, HW_OFF + 8 * i);
        emit(OP_ST, 0, 1, 11, HB_OFF + 64 * blk + 8 * i);
      end
    end
    // D. digest after block 1 if the message fit in one block, else after block 2
    emit(OP_LD, 7, 1, 0, SHORT_OFF);
    for (int i = 0; i < 8; i++) begin
      emit(OP_LD, 2, 1, 0, HB_OFF + 8 * i);
      emit(OP_LD, 3, 1, 0, HB_OFF + 64 + 8 * i);
      emit(OP_CMOV, 3, 7, 2, 0);
      emit(OP_ST, 0, 1, 3, OUT_OFF + 8 * i);
    end
    emit(OP_LD, 0, 1, 0, OUT_OFF);
    emit(OP_HALT, 0, 0, 0, 0);
  endtask

  initial begin
    oz_status_e st;
    logic [63:0] rv, w;
    int unsigned t_run, t_done, tmin, tmax;
    logic [7:0] msg [];
    dig_t ref_d;
    tmin = '1; tmax = 0;

    build_consts();
    check(kc[0] == 64'h428A2F98D728AE22 && h0c[0] == 64'h6A09E667F3BCC908, "constants from the primes");
    msg = new[3];
    msg[0] = "a"; msg[1] = "b"; msg[2] = "c";
    ref_d = sha512_ref(msg, 3);
    check(ref_d[0] == 64'hDDAF35A193617ABA && ref_d[7] == 64'h2A9AC94FA54CA49F, "reference SHA-512 of abc");

    repeat (3) @(negedge clk);
    rst_n = 1;
    gen_program();
    $display("Ozone SHA-512: %0d instructions, %0d cycles by static count", pc, cost);
    for (int t = 0; t < 80; t++) dspm_write(K_OFF + 8 * t, kc[t]);
    for (int i = 0; i < 8; i++) dspm_write(H0_OFF + 8 * i, h0c[i]);
    thread_create(int'(cost), DSIZE);

    msg = new[128];
    for (int len = 1; len <= 128; len++) begin
      for (int i = 0; i < 128; i++) begin
        msg[i] = (i < len) ? 8'(32 + $urandom % 95) : 8'($urandom);  // bytes past len are stale
        dspm_write(MSG_OFF + 8 * i, 64'(msg[i]));
      end
      dspm_write(LEN_OFF, 64'(len));
      ref_d = sha512_ref(msg, len);
      thread_invoke(st, rv, t_run, t_done);
      check(st == ST_OK, $sformatf("len %0d returns", len));
      check(rv == ref_d[0], $sformatf("len %0d digest word 0 %h, expected %h", len, rv, ref_d[0]));
      for (int i = 1; i < 8; i++) begin
        dspm_read(OUT_OFF + 8 * i, w);
        check(w == ref_d[i], $sformatf("len %0d digest word %0d", len, i));
      end
      if (t_done < tmin) tmin = t_done;
      if (t_done > tmax) tmax = t_done;
    end
    check(tmin == cost && tmax == cost,
          $sformatf("all lengths take %0d..%0d cycles, expected exactly %0d", tmin, tmax, cost));
    $display("SHA-512: 128 lengths, cycles min=%0d max=%0d", tmin, tmax);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
