// tb_ozone_rsa: RSA private-key exponentiation, run on the Ozone resource.
//
// Computes base^e mod m with a fixed-window method: 4-bit windows of the
// secret exponent e, taken from the top, each costing four Montgomery squarings
// and one Montgomery multiplication by a table entry. Nothing depends on e in
// the control flow: the window value is pulled out of a shifted copy of e, and
// the table entry is picked by reading all 16 entries and keeping one with
// conditional moves. Within each Montgomery multiplication, the final
// subtraction of m is always computed and kept or dropped with conditional
// moves. Numbers are NL little-endian 64-bit limbs. The public values that
// depend only on m (-m^-1 mod 2^64 and R^2 mod m, R = 2^(64 NL)) are supplied
// by the OS, as a Montgomery context is.
//
// This is a smaller version of the 1024-bit workload: NL = 4, a 256-bit modulus
// and exponent. Loop counters live in the data scratchpad, and the
// multiplication and add-with-carry steps use the test core's MUL, MULHU and
// SLTU. The testbench checks each result against plain wide-integer square and
// multiply (base * base % m, bit by bit), and checks that every key takes the
// same number of cycles. That number is summed from the instruction latencies
// of the generated code and its trip counts. Ends with a TB_RESULT line.
module tb_ozone_rsa;
  import ozone_pkg::*;
  import ozone_toy_isa_pkg::*;

  localparam int unsigned IAW = $clog2(ISPM_BYTES / 8), DAW = $clog2(DSPM_BYTES / 8);
  localparam int NL = 4, NB = 64 * NL, NW = NB / 4, NRUNS = 8;
  localparam int MOD_OFF = 'h000, N0_OFF = 'h040, R2_OFF = 'h060, B_OFF = 'h080, E_OFF = 'h0A0,
                 ONE_OFF = 'h0C0, RES_OFF = 'h0E0, EX_OFF = 'h100, ACC_OFF = 'h120,
                 SEL_OFF = 'h140, D_OFF = 'h160, CNT0 = 'h180, CNT1 = 'h188, CNT2 = 'h190,
                 CNT3 = 'h198, IDX_OFF = 'h1A0, TBL_OFF = 'h200, DSIZE = 'h400;

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
    while (!result_valid && cyc < 2000000) begin
      if (core_start) t_start = cyc;
      if (core_done && t_done == 0) t_done = cyc - t_start;
      @(negedge clk); cyc++;
    end
    st = status; rv = retval; t_run = cyc - t_start;
  endtask




  // ---- code generation with a static cycle count ----
  int unsigned pc = 0;
  longint unsigned cost = 0, trip = 1;
  int unsigned lp_pc [$], lp_n [$];
  task automatic emit(input ozone_toy_isa_pkg::op_e o, input int rd, input int rs1, input int rs2, input int imm);
    ispm_write(pc, enc(o, rd, rs1, rs2, imm));
    pc++;
    cost += trip * ((o == OP_LD || o == OP_ST) ? 3 : 2);
  endtask
  // fixed-count loop with its counter in the scratchpad at cnt (uses r0, r13)
  task automatic loop_begin(input int cnt, input int start, input int unsigned n);
    emit(OP_LI, 0, 0, 0, start);
    emit(OP_ST, 0, 1, 0, cnt);
    lp_pc.push_back(pc); lp_n.push_back(n);
    trip *= n;
  endtask
  task automatic loop_end(input int cnt, input int stop);
    int unsigned lpc, n;
    emit(OP_LD, 0, 1, 0, cnt);
    emit(OP_ADDI, 0, 0, 0, 1);
    emit(OP_ST, 0, 1, 0, cnt);
    emit(OP_LI, 13, 0, 0, stop);
    lpc = lp_pc.pop_back(); n = lp_n.pop_back();
    emit(OP_BNE, 0, 0, 13, (int'(lpc) - int'(pc)) * 8);
    trip /= n;
    cost += 2 * trip;  // the exit of each pass through the loop is mispredicted
  endtask
  task automatic ptr(input int r, input int off);
    emit(OP_LI, r, 0, 0, off);
    emit(OP_ADD, r, r, 1, 0);
  endtask

  // Montgomery product [r4] = [r2] * [r3] / R mod m (CIOS). t[0..NL+1] in
  // r5..r10; r11 b[i] then q, r12 carry, r13/r14 product, r0 scratch.
  function automatic int t(input int k); return 5 + k; endfunction
  task automatic mul_acc(input int dst, input int src, input int mreg_ptr, input int off);
    // (C, dst) = src + [mreg_ptr + off] * r11 + C
    emit(OP_LD, 13, mreg_ptr, 0, off);
    emit(OP_MULHU, 14, 13, 11, 0);
    emit(OP_MUL, 13, 13, 11, 0);
    emit(OP_ADD, 13, 13, 12, 0);   emit(OP_SLTU, 0, 13, 12, 0);  emit(OP_ADD, 14, 14, 0, 0);
    emit(OP_ADD, dst, src, 13, 0); emit(OP_SLTU, 0, dst, 13, 0); emit(OP_ADD, 12, 14, 0, 0);
  endtask
  task automatic montmul();
    for (int k = 0; k < NL + 2; k++) emit(OP_ADD, t(k), 15, 15, 0);
    for (int i = 0; i < NL; i++) begin
      emit(OP_LD, 11, 3, 0, 8 * i);
      emit(OP_ADD, 12, 15, 15, 0);
      for (int j = 0; j < NL; j++) mul_acc(t(j), t(j), 2, 8 * j);
      emit(OP_ADD, t(NL), t(NL), 12, 0);
      emit(OP_SLTU, t(NL + 1), t(NL), 12, 0);
      emit(OP_LD, 11, 1, 0, N0_OFF);
      emit(OP_MUL, 11, t(0), 11, 0);
      // low limb of t + q*m[0] is zero; keep only its carry
      emit(OP_LD, 13, 1, 0, MOD_OFF);
      emit(OP_MULHU, 14, 13, 11, 0);
      emit(OP_MUL, 13, 13, 11, 0);
      emit(OP_ADD, 13, 13, t(0), 0); emit(OP_SLTU, 0, 13, t(0), 0); emit(OP_ADD, 12, 14, 0, 0);
      for (int j = 1; j < NL; j++) mul_acc(t(j - 1), t(j), 1, MOD_OFF + 8 * j);
      emit(OP_ADD, t(NL - 1), t(NL), 12, 0);
      emit(OP_SLTU, 0, t(NL - 1), 12, 0);
      emit(OP_ADD, t(NL), t(NL + 1), 0, 0);
    end
    // d = t - m with borrow in r12; keep d if t[NL] equals the final borrow
    emit(OP_ADD, 12, 15, 15, 0);
    for (int j = 0; j < NL; j++) begin
      emit(OP_LD, 13, 1, 0, MOD_OFF + 8 * j);
      emit(OP_SUB, 14, t(j), 13, 0);
      emit(OP_SLTU, 0, t(j), 13, 0);
      emit(OP_SLTU, 11, 14, 12, 0);
      emit(OP_SUB, 14, 14, 12, 0);
      emit(OP_ADD, 12, 0, 11, 0);
      emit(OP_ST, 0, 1, 14, D_OFF + 8 * j);
    end
    emit(OP_SEQ, 11, t(NL), 12, 0);
    for (int j = 0; j < NL; j++) begin
      emit(OP_LD, 13, 1, 0, D_OFF + 8 * j);
      emit(OP_CMOV, t(j), 11, 13, 0);
      emit(OP_ST, 0, 4, t(j), 8 * j);
    end
  endtask

  task automatic gen_program();
    emit(OP_LI, 1, 0, 0, int'(DSPM_BASE[31:0]));
    emit(OP_LI, 0, 0, 0, 1);
    emit(OP_ST, 0, 1, 0, ONE_OFF);
    for (int l = 1; l < NL; l++) emit(OP_ST, 0, 1, 15, ONE_OFF + 8 * l);
    for (int l = 0; l < NL; l++) begin
      emit(OP_LD, 0, 1, 0, E_OFF + 8 * l);
      emit(OP_ST, 0, 1, 0, EX_OFF + 8 * l);
    end
    // table: T[0] = R mod m, T[1] = base * R mod m, T[i] = T[i-1] * T[1]
    ptr(2, R2_OFF); ptr(3, ONE_OFF); ptr(4, TBL_OFF);           montmul();
    ptr(2, B_OFF);  ptr(3, R2_OFF);  ptr(4, TBL_OFF + 8 * NL);  montmul();
    loop_begin(CNT3, 2, 14);
    emit(OP_LD, 0, 1, 0, CNT3);
    emit(OP_SHLI, 4, 0, 0, $clog2(8 * NL));
    emit(OP_ADD, 4, 4, 1, 0);
    emit(OP_ADDI, 4, 4, 0, TBL_OFF);
    emit(OP_ADDI, 2, 4, 0, -8 * NL);
    ptr(3, TBL_OFF + 8 * NL);
    montmul();
    loop_end(CNT3, 16);
    for (int l = 0; l < NL; l++) begin
      emit(OP_LD, 0, 1, 0, TBL_OFF + 8 * l);
      emit(OP_ST, 0, 1, 0, ACC_OFF + 8 * l);
    end
    // windows, most significant first
    loop_begin(CNT0, 0, NW);
      loop_begin(CNT1, 0, 4);
        ptr(2, ACC_OFF); emit(OP_ADD, 3, 2, 15, 0); emit(OP_ADD, 4, 2, 15, 0);
        montmul();
      loop_end(CNT1, 4);
      for (int l = 0; l < NL; l++) emit(OP_LD, 5 + l, 1, 0, EX_OFF + 8 * l);
      emit(OP_SHRI, 9, 5 + NL - 1, 0, 60);
      emit(OP_ST, 0, 1, 9, IDX_OFF);
      for (int l = NL - 1; l > 0; l--) begin
        emit(OP_SHLI, 5 + l, 5 + l, 0, 4);
        emit(OP_SHRI, 0, 5 + l - 1, 0, 60);
        emit(OP_XOR, 5 + l, 5 + l, 0, 0);
      end
      emit(OP_SHLI, 5, 5, 0, 4);
      for (int l = 0; l < NL; l++) emit(OP_ST, 0, 1, 5 + l, EX_OFF + 8 * l);
      for (int l = 0; l < NL; l++) emit(OP_ADD, 5 + l, 15, 15, 0);
      loop_begin(CNT2, 0, 16);
        emit(OP_LD, 0, 1, 0, CNT2);
        emit(OP_LD, 9, 1, 0, IDX_OFF);
        emit(OP_SEQ, 11, 9, 0, 0);
        emit(OP_SHLI, 13, 0, 0, $clog2(8 * NL));
        emit(OP_ADD, 13, 13, 1, 0);
        for (int l = 0; l < NL; l++) begin
          emit(OP_LD, 14, 13, 0, TBL_OFF + 8 * l);
          emit(OP_CMOV, 5 + l, 11, 14, 0);
        end
      loop_end(CNT2, 16);
      for (int l = 0; l < NL; l++) emit(OP_ST, 0, 1, 5 + l, SEL_OFF + 8 * l);
      ptr(2, ACC_OFF); ptr(3, SEL_OFF); emit(OP_ADD, 4, 2, 15, 0);
      montmul();
    loop_end(CNT0, NW);
    // leave Montgomery form
    ptr(2, ACC_OFF); ptr(3, ONE_OFF); ptr(4, RES_OFF);
    montmul();
    emit(OP_LD, 0, 1, 0, RES_OFF);
    emit(OP_HALT, 0, 0, 0, 0);
  endtask

  // ---- reference ----
  typedef logic [NB-1:0] num_t;
  function automatic num_t modexp_ref(input num_t b, input num_t e, input num_t m);
    logic [2*NB-1:0] r = 1;
    for (int i = NB - 1; i >= 0; i--) begin
      r = (r * r) % m;
      if (e[i]) r = (r * b) % m;
    end
    return NB'(r);
  endfunction

  initial begin
    oz_status_e st;
    logic [63:0] rv, w, inv;
    int unsigned t_run, t_done, tmin, tmax;
    num_t m, b, e, res, r2;
    logic [3*NB-1:0] big;
    tmin = '1; tmax = 0;

    check(modexp_ref(NB'(2), NB'(10), NB'(1000003)) == NB'(1024) &&
          modexp_ref(NB'(3), NB'(1000002), NB'(1000003)) == NB'(1), "reference exponentiation");

    repeat (3) @(negedge clk);
    rst_n = 1;
    gen_program();
    $display("Ozone RSA (%0d-bit): %0d instructions, %0d cycles by static count", NB, pc, cost);
    thread_create(int'(cost), DSIZE);

    for (int run = 0; run < NRUNS; run++) begin
      for (int l = 0; l < NL; l++) begin
        m[64*l +: 64] = {$urandom, $urandom};
        b[64*l +: 64] = {$urandom, $urandom};
        e[64*l +: 64] = {$urandom, $urandom};
      end
      m[NB-1] = 1'b1; m[0] = 1'b1;
      b = b % m;
      if (run == 0) e = '1;  // all windows 15
      if (run == 1) e = '0;  // all windows 0
      inv = 64'd1;  // m[0]^-1 mod 2^64 by Newton steps
      for (int k = 0; k < 6; k++) inv = inv * (64'd2 - m[63:0] * inv);
      big = (3*NB)'(1) << (2 * NB);
      r2 = NB'(big % m);
      for (int l = 0; l < NL; l++) begin
        dspm_write(MOD_OFF + 8 * l, m[64*l +: 64]);
        dspm_write(R2_OFF + 8 * l, r2[64*l +: 64]);
        dspm_write(B_OFF + 8 * l, b[64*l +: 64]);
        dspm_write(E_OFF + 8 * l, e[64*l +: 64]);
      end
      dspm_write(N0_OFF, -inv);
      res = modexp_ref(b, e, m);
      thread_invoke(st, rv, t_run, t_done);
      check(st == ST_OK, $sformatf("run %0d returns", run));
      for (int l = 0; l < NL; l++) begin
        dspm_read(RES_OFF + 8 * l, w);
        check(w == res[64*l +: 64], $sformatf("run %0d limb %0d %h, expected %h", run, l, w, res[64*l +: 64]));
      end
      check(rv == res[63:0], $sformatf("run %0d return value", run));
      if (t_done < tmin) tmin = t_done;
      if (t_done > tmax) tmax = t_done;
    end
    check(tmin == cost && tmax == cost,
          $sformatf("all keys take %0d..%0d cycles, expected exactly %0d", tmin, tmax, cost));
    $display("RSA: %0d keys, cycles min=%0d max=%0d", NRUNS, tmin, tmax);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
