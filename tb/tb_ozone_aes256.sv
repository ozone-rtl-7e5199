// tb_ozone_aes256: AES-256 in CBC and in XTS mode, run on the Ozone resource.
//
// Two Ozone programs share the instruction scratchpad. Each does the whole job
// from the secret key. The CBC program does the AES-256 key expansion (60
// round-key words, S-box lookups on key bytes), then encrypts two chained
// blocks, C0 = E(P0 ^ IV) and C1 = E(P1 ^ C0). The XTS program expands both
// keys, encrypts the sector number under the second key to get the tweak T,
// and then encrypts two blocks as C = E(P ^ T) ^ T, doubling T in GF(2^128)
// between blocks with fixed shift-and-mask code and a conditional move for the
// reduction. Each block encryption is the key addition, 13 T-table rounds in a
// fixed-count loop and a final round of S-box lookups. Every table index
// depends on the key and the data, and every lookup is a plain load from the
// data scratchpad. State words are 32-bit AES columns, most significant byte
// first, one per 64-bit register. Table entries sit one per scratchpad word.
// The OS switches between the programs by destroying and re-creating the
// thread context with the other entry point and cycle count.
//
// The testbench builds the S-box and the four T-tables from the field
// arithmetic and checks a byte-oriented reference AES (SubBytes, ShiftRows,
// MixColumns, no tables) against the AES-256 vector of FIPS-197. Each mode then
// runs with 1024 random keys and inputs. CBC's first run is the FIPS-197 case.
// Every ciphertext must match the reference, and every run of a mode must take
// the same number of cycles. That number is summed from the instruction
// latencies of the generated code. Ends with a TB_RESULT line.
module tb_ozone_aes256;
  import ozone_pkg::*;
  import ozone_toy_isa_pkg::*;

  localparam int unsigned IAW = $clog2(ISPM_BYTES / 8), DAW = $clog2(DSPM_BYTES / 8);
  localparam int K_OFF = 'h000, IV_OFF = 'h040, PT_OFF = 'h060, CT_OFF = 'h0A0, RK_OFF = 'h100,
                 K2_OFF = 'h2E0, SEC_OFF = 'h320, TW_OFF = 'h340,
                 SB_OFF = 'h2400, RK2_OFF = 'h2C00, DSIZE = 'h2E00;
  localparam int TE_OFF [4] = '{'h0400, 'h0C00, 'h1400, 'h1C00};
  localparam int NRUNS = 1024;

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
  task automatic thread_create(input int unsigned ncyc, input int unsigned dsize, input int unsigned epc);
    @(negedge clk);
    ctx_in.num_cycles = ncyc; ctx_in.ispm_size = 16'(ISPM_BYTES);
    ctx_in.dspm_size = 17'(dsize); ctx_in.entry_pc = 15'(epc);
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



  // ---- AES tables, from the field arithmetic ----
  function automatic logic [7:0] xt(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1B : 8'h00);
  endfunction
  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= a;
      a = xt(a);
    end
    return p;
  endfunction
  function automatic logic [7:0] rotl8(input logic [7:0] b, input int n);
    return (b << n) | (b >> (8 - n));
  endfunction
  logic [7:0]  sbox [256];
  logic [31:0] te [4][256];
  task automatic build_tables();
    for (int x = 0; x < 256; x++) begin
      logic [7:0] inv = 0;
      for (int y = 1; y < 256; y++) if (gmul(8'(x), 8'(y)) == 8'h01) inv = 8'(y);
      sbox[x] = inv ^ rotl8(inv, 1) ^ rotl8(inv, 2) ^ rotl8(inv, 3) ^ rotl8(inv, 4) ^ 8'h63;
    end
    for (int x = 0; x < 256; x++) begin
      te[0][x] = {xt(sbox[x]), sbox[x], sbox[x], xt(sbox[x]) ^ sbox[x]};
      for (int m = 1; m < 4; m++) te[m][x] = {te[m-1][x][7:0], te[m-1][x][31:8]};
    end
  endtask


  // ---- byte-oriented reference AES-256 ----
  typedef logic [31:0] rk_t [60];
  function automatic rk_t expand_ref(input logic [7:0] k [32]);
    rk_t w;
    logic [31:0] t;
    logic [7:0] rc = 8'h01;
    for (int i = 0; i < 8; i++) w[i] = {k[4*i], k[4*i+1], k[4*i+2], k[4*i+3]};
    for (int i = 8; i < 60; i++) begin
      t = w[i-1];
      if (i % 8 == 0) begin
        t = {t[23:0], t[31:24]};
        t = {sbox[t[31:24]], sbox[t[23:16]], sbox[t[15:8]], sbox[t[7:0]]} ^ {rc, 24'h0};
        rc = xt(rc);
      end else if (i % 8 == 4)
        t = {sbox[t[31:24]], sbox[t[23:16]], sbox[t[15:8]], sbox[t[7:0]]};
      w[i] = w[i-8] ^ t;
    end
    return w;
  endfunction
  typedef logic [7:0] blk_t [16];
  function automatic blk_t encrypt_ref(input blk_t in, input rk_t w);
    blk_t s = in, u;
    for (int r = 0; r <= 14; r++) begin
      if (r > 0) begin
        for (int i = 0; i < 16; i++) s[i] = sbox[s[i]];
        for (int c = 0; c < 4; c++) for (int q = 0; q < 4; q++) u[4*c+q] = s[4*((c+q)%4)+q];
        s = u;
        if (r < 14)
          for (int c = 0; c < 4; c++) begin
            logic [7:0] a0, a1, a2, a3;
            a0 = s[4*c]; a1 = s[4*c+1]; a2 = s[4*c+2]; a3 = s[4*c+3];
            s[4*c]   = xt(a0) ^ xt(a1) ^ a1 ^ a2 ^ a3;
            s[4*c+1] = a0 ^ xt(a1) ^ xt(a2) ^ a2 ^ a3;
            s[4*c+2] = a0 ^ a1 ^ xt(a2) ^ xt(a3) ^ a3;
            s[4*c+3] = xt(a0) ^ a0 ^ a1 ^ a2 ^ xt(a3);
          end
      end
      for (int c = 0; c < 4; c++) for (int q = 0; q < 4; q++) s[4*c+q] ^= w[4*r+c][31-8*q -: 8];
    end
    return s;
  endfunction
  function automatic logic [31:0] col(input blk_t b, input int c);
    return {b[4*c], b[4*c+1], b[4*c+2], b[4*c+3]};
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

  // dst = SubWord of src with its bytes taken in the order given by rot (1: RotWord first)
  task automatic sub_word(input int dst, input int src, input int rot);
    for (int k = 0; k < 4; k++) begin
      emit(OP_SHRI, 10, src, 0, 24 - 8 * ((k + rot) % 4));
      emit(OP_ANDI, 10, 10, 0, 255);
      emit(OP_SHLI, 10, 10, 0, 3);
      emit(OP_ADD, 10, 10, 1, 0);
      emit(OP_LD, 11, 10, 0, SB_OFF);
      emit(OP_SHLI, 11, 11, 0, 24 - 8 * k);
      if (k == 0) emit(OP_ADD, dst, 11, 15, 0);
      else        emit(OP_XOR, dst, dst, 11, 0);
    end
  endtask

  // one column of a table round (final = 0) or of the last round (final = 1);
  // state in r2..r5, result in r6..r9, round key at r12
  task automatic round_col(input int c, input bit final_r);
    for (int m = 0; m < 4; m++) begin
      emit(OP_SHRI, 10, 2 + (c + m) % 4, 0, 24 - 8 * m);
      emit(OP_ANDI, 10, 10, 0, 255);
      emit(OP_SHLI, 10, 10, 0, 3);
      emit(OP_ADD, 10, 10, 1, 0);
      if (final_r) begin
        emit(OP_LD, 11, 10, 0, SB_OFF);
        emit(OP_SHLI, 11, 11, 0, 24 - 8 * m);
      end else
        emit(OP_LD, 11, 10, 0, TE_OFF[m]);
      if (m == 0) emit(OP_ADD, 6 + c, 11, 15, 0);
      else        emit(OP_XOR, 6 + c, 6 + c, 11, 0);
    end
    emit(OP_LD, 11, 12, 0, 8 * c);
    emit(OP_XOR, 6 + c, 6 + c, 11, 0);
  endtask

  task automatic expand(input int k_off, input int rk_off);
    logic [7:0] rc = 8'h01;
    for (int i = 0; i < 8; i++) begin
      emit(OP_LD, 2, 1, 0, k_off + 8 * i);
      emit(OP_ST, 0, 1, 2, rk_off + 8 * i);
    end
    for (int i = 8; i < 60; i++) begin
      if (i % 8 == 0) begin
        sub_word(3, 2, 1);
        emit(OP_LI, 11, 0, 0, int'({rc, 24'h0}));
        emit(OP_XOR, 3, 3, 11, 0);
        rc = xt(rc);
      end else if (i % 8 == 4)
        sub_word(3, 2, 0);
      else
        emit(OP_ADD, 3, 2, 15, 0);
      emit(OP_LD, 11, 1, 0, rk_off + 8 * (i - 8));
      emit(OP_XOR, 2, 3, 11, 0);
      emit(OP_ST, 0, 1, 2, rk_off + 8 * i);
    end
  endtask

  // encrypt the block in r2..r5 with the round keys at rk_off; result in r6..r9
  task automatic enc_block(input int rk_off);
    for (int c = 0; c < 4; c++) begin
      emit(OP_LD, 11, 1, 0, rk_off + 8 * c);
      emit(OP_XOR, 2 + c, 2 + c, 11, 0);
    end
    emit(OP_LI, 12, 0, 0, rk_off + 32);       emit(OP_ADD, 12, 12, 1, 0);
    emit(OP_LI, 13, 0, 0, rk_off + 32 * 14);  emit(OP_ADD, 13, 13, 1, 0);
    loop_begin(13);
    for (int c = 0; c < 4; c++) round_col(c, 1'b0);
    for (int c = 0; c < 4; c++) emit(OP_ADD, 2 + c, 6 + c, 15, 0);
    emit(OP_ADDI, 12, 12, 0, 32);
    loop_end(12, 13);
    for (int c = 0; c < 4; c++) round_col(c, 1'b1);
  endtask

  task automatic gen_cbc();
    emit(OP_LI, 1, 0, 0, int'(DSPM_BASE[31:0]));
    expand(K_OFF, RK_OFF);
    for (int b = 0; b < 2; b++) begin
      for (int c = 0; c < 4; c++) begin
        emit(OP_LD, 2 + c, 1, 0, PT_OFF + 32 * b + 8 * c);
        emit(OP_LD, 11, 1, 0, (b == 0) ? IV_OFF + 8 * c : CT_OFF + 8 * c);
        emit(OP_XOR, 2 + c, 2 + c, 11, 0);
      end
      enc_block(RK_OFF);
      for (int c = 0; c < 4; c++) emit(OP_ST, 0, 1, 6 + c, CT_OFF + 32 * b + 8 * c);
    end
    emit(OP_LD, 0, 1, 0, CT_OFF);
    emit(OP_HALT, 0, 0, 0, 0);
  endtask

  task automatic gen_xts();
    emit(OP_LI, 1, 0, 0, int'(DSPM_BASE[31:0]));
    expand(K_OFF, RK_OFF);
    expand(K2_OFF, RK2_OFF);
    for (int c = 0; c < 4; c++) emit(OP_LD, 2 + c, 1, 0, SEC_OFF + 8 * c);
    enc_block(RK2_OFF);
    for (int c = 0; c < 4; c++) emit(OP_ST, 0, 1, 6 + c, TW_OFF + 8 * c);
    for (int b = 0; b < 2; b++) begin
      for (int c = 0; c < 4; c++) begin
        emit(OP_LD, 2 + c, 1, 0, PT_OFF + 32 * b + 8 * c);
        emit(OP_LD, 11, 1, 0, TW_OFF + 8 * c);
        emit(OP_XOR, 2 + c, 2 + c, 11, 0);
      end
      enc_block(RK_OFF);
      for (int c = 0; c < 4; c++) begin
        emit(OP_LD, 11, 1, 0, TW_OFF + 8 * c);
        emit(OP_XOR, 6 + c, 6 + c, 11, 0);
        emit(OP_ST, 0, 1, 6 + c, CT_OFF + 32 * b + 8 * c);
      end
      // T = T * x: byte k of the little-endian 128-bit value is byte k % 4 of
      // column k / 4, counted from the top
      for (int c = 0; c < 4; c++) emit(OP_LD, 2 + c, 1, 0, TW_OFF + 8 * c);
      for (int c = 0; c < 4; c++) begin
        emit(OP_SHLI, 10, 2 + c, 0, 1);
        emit(OP_ANDI, 10, 10, 0, 'hFEFEFEFE);
        emit(OP_SHRI, 11, 2 + c, 0, 15);
        emit(OP_ANDI, 11, 11, 0, 'h00010101);
        emit(OP_XOR, 6 + c, 10, 11, 0);
        if (c > 0) begin
          emit(OP_ANDI, 11, 2 + c - 1, 0, 'h80);
          emit(OP_SHLI, 11, 11, 0, 17);
          emit(OP_XOR, 6 + c, 6 + c, 11, 0);
        end else begin
          emit(OP_SHRI, 11, 5, 0, 7);
          emit(OP_ANDI, 11, 11, 0, 1);
          emit(OP_LI, 10, 0, 0, 'h87000000);
          emit(OP_ADD, 0, 15, 15, 0);
          emit(OP_CMOV, 0, 11, 10, 0);
          emit(OP_XOR, 6, 6, 0, 0);
        end
      end
      for (int c = 0; c < 4; c++) emit(OP_ST, 0, 1, 6 + c, TW_OFF + 8 * c);
    end
    emit(OP_LD, 0, 1, 0, CT_OFF);
    emit(OP_HALT, 0, 0, 0, 0);
  endtask

  function automatic blk_t mul_alpha(input blk_t b);
    logic c = 1'b0, n;
    for (int k = 0; k < 16; k++) begin
      n = b[k][7];
      b[k] = {b[k][6:0], c};
      c = n;
    end
    if (c) b[0] ^= 8'h87;
    return b;
  endfunction

  longint unsigned cost_cbc, cost_xts;
  int unsigned xts_pc;

  task automatic run_mode(input bit xts);
    oz_status_e st;
    logic [63:0] rv, w;
    int unsigned t_run, t_done, tmin, tmax;
    logic [7:0] key [32], key2 [32];
    blk_t iv, p0, p1, c0, c1, x, tw;
    rk_t rk, rk2;
    longint unsigned want = xts ? cost_xts : cost_cbc;
    tmin = '1; tmax = 0;
    @(negedge clk); destroy = 1;
    @(negedge clk); destroy = 0;
    thread_create(int'(want), DSIZE, xts ? 8 * xts_pc : 0);
    for (int run = 0; run < NRUNS; run++) begin
      for (int i = 0; i < 32; i++) begin key[i] = 8'($urandom); key2[i] = 8'($urandom); end
      for (int i = 0; i < 16; i++) begin
        iv[i] = 8'($urandom); p0[i] = 8'($urandom); p1[i] = 8'($urandom);
      end
      if (run == 0 && !xts) begin  // the FIPS-197 case, zero IV, through the Ozone code too
        for (int i = 0; i < 32; i++) key[i] = 8'(i);
        for (int i = 0; i < 16; i++) begin iv[i] = 0; p0[i] = 8'(17 * i); end
      end
      for (int i = 0; i < 8; i++) begin
        dspm_write(K_OFF + 8 * i, 64'({key[4*i], key[4*i+1], key[4*i+2], key[4*i+3]}));
        if (xts) dspm_write(K2_OFF + 8 * i, 64'({key2[4*i], key2[4*i+1], key2[4*i+2], key2[4*i+3]}));
      end
      for (int c = 0; c < 4; c++) begin
        dspm_write((xts ? SEC_OFF : IV_OFF) + 8 * c, 64'(col(iv, c)));
        dspm_write(PT_OFF + 8 * c, 64'(col(p0, c)));
        dspm_write(PT_OFF + 32 + 8 * c, 64'(col(p1, c)));
      end
      rk = expand_ref(key);
      if (xts) begin  // iv is the sector number here
        rk2 = expand_ref(key2);
        tw = encrypt_ref(iv, rk2);
        for (int i = 0; i < 16; i++) x[i] = p0[i] ^ tw[i];
        c0 = encrypt_ref(x, rk);
        for (int i = 0; i < 16; i++) c0[i] ^= tw[i];
        tw = mul_alpha(tw);
        for (int i = 0; i < 16; i++) x[i] = p1[i] ^ tw[i];
        c1 = encrypt_ref(x, rk);
        for (int i = 0; i < 16; i++) c1[i] ^= tw[i];
      end else begin
        for (int i = 0; i < 16; i++) x[i] = p0[i] ^ iv[i];
        c0 = encrypt_ref(x, rk);
        for (int i = 0; i < 16; i++) x[i] = p1[i] ^ c0[i];
        c1 = encrypt_ref(x, rk);
      end
      thread_invoke(st, rv, t_run, t_done);
      check(st == ST_OK, $sformatf("xts=%0d run %0d returns", xts, run));
      check(rv == 64'(col(c0, 0)), $sformatf("xts=%0d run %0d C0 word 0 %h, expected %h", xts, run, rv, col(c0, 0)));
      for (int c = 0; c < 4; c++) begin
        dspm_read(CT_OFF + 8 * c, w);
        check(w == 64'(col(c0, c)), $sformatf("xts=%0d run %0d C0 word %0d", xts, run, c));
        dspm_read(CT_OFF + 32 + 8 * c, w);
        check(w == 64'(col(c1, c)), $sformatf("xts=%0d run %0d C1 word %0d", xts, run, c));
      end
      if (t_done < tmin) tmin = t_done;
      if (t_done > tmax) tmax = t_done;
    end
    check(tmin == want && tmax == want,
          $sformatf("xts=%0d: all runs take %0d..%0d cycles, expected exactly %0d", xts, tmin, tmax, want));
    $display("AES-256-%s: %0d keys, cycles min=%0d max=%0d", xts ? "XTS" : "CBC", NRUNS, tmin, tmax);
  endtask

  initial begin
    logic [7:0] key [32];
    blk_t x, c0;

    build_tables();
    check(sbox[0] == 8'h63 && sbox[1] == 8'h7C && sbox[8'h53] == 8'hED, "S-box spot values");
    check(te[0][0] == 32'hC66363A5, "T0[0] spot value");
    for (int i = 0; i < 32; i++) key[i] = 8'(i);
    for (int i = 0; i < 16; i++) x[i] = 8'(17 * i);
    c0 = encrypt_ref(x, expand_ref(key));
    check({col(c0, 0), col(c0, 1), col(c0, 2), col(c0, 3)} == 128'h8EA2B7CA516745BFEAFC49904B496089,
          "reference AES-256 against the FIPS-197 vector");
    for (int i = 0; i < 16; i++) x[i] = 8'h00;
    x[15] = 8'h80; x[0] = 8'h01;
    c0 = mul_alpha(x);
    check(c0[0] == 8'h85 && c0[1] == 8'h00 && c0[15] == 8'h00, "tweak doubling with reduction");

    repeat (3) @(negedge clk);
    rst_n = 1;
    gen_cbc();
    cost_cbc = cost; cost = 0;
    xts_pc = pc;
    gen_xts();
    cost_xts = cost;
    $display("Ozone AES-256: %0d instructions; CBC %0d cycles, XTS %0d cycles by static count",
             pc, cost_cbc, cost_xts);
    for (int m = 0; m < 4; m++)
      for (int v = 0; v < 256; v++) dspm_write(TE_OFF[m] + 8 * v, 64'(te[m][v]));
    for (int v = 0; v < 256; v++) dspm_write(SB_OFF + 8 * v, 64'(sbox[v]));
    run_mode(1'b0);
    run_mode(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
