// tb_ozone_aes_round: the first AES round of the Bernstein cache-timing attack,
// run on the Ozone resource.
//
// The attack sweeps one plaintext byte n[0] over 0..255 under many keys and
// looks for a value whose encryption takes longer, which reveals K[0]. Here the
// OS loads the four 256-entry AES T-tables (computed below from the S-box) into
// the DSPM. The Ozone code computes the four first-round column words
//   t_j = T0[s[4j]] ^ T1[s[4j+5]] ^ T2[s[4j+10]] ^ T3[s[4j+15]] ^ x_j,
// with s[i] = K[i] ^ n[i] and indices taken mod 16, as straight-line code of
// direct, secret-indexed table loads. On a cached core these loads are exactly
// what leaks. From the scratchpad they all take the same time. The testbench
// sweeps n[0] over 0..255, with two random keys and random other bytes for each
// value, and checks every t_j against a reference. It also checks that all 512
// runs take the same number of cycles: 303, worked out from the instruction
// latencies (2 + 4 x (3 + 4 x 17 + 3) + 3 + 2). Ends with a TB_RESULT line.
module tb_ozone_aes_round;
  import ozone_pkg::*;
  import ozone_toy_isa_pkg::*;

  localparam int unsigned IAW = $clog2(ISPM_BYTES / 8), DAW = $clog2(DSPM_BYTES / 8);
  localparam int unsigned K_OFF = 'h000, N_OFF = 'h080, X_OFF = 'h100, T_OUT = 'h120;
  localparam int unsigned TBL_OFF [4] = '{'h0400, 'h0C00, 'h1400, 'h1C00};
  localparam int unsigned EXPECT_CYC = 2 + 4 * (3 + 4 * 17 + 3) + 3 + 2;

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

  logic [7:0]  key [16], pt [16];
  logic [31:0] xr [4];

  function automatic logic [31:0] ref_t(input int j);
    logic [31:0] t = xr[j];
    for (int m = 0; m < 4; m++) t ^= te[m][key[(4*j + 5*m) % 16] ^ pt[(4*j + 5*m) % 16]];
    return t;
  endfunction

  initial begin
    oz_status_e st;
    logic [63:0] rv, w;
    int unsigned t_run, t_done, pc, tmin, tmax, runs;
    tmin = '1; tmax = 0; runs = 0;

    build_tables();
    check(sbox[0] == 8'h63 && sbox[1] == 8'h7C && sbox[8'h53] == 8'hED, "S-box spot values");
    check(te[0][0] == 32'hC66363A5, "T0[0] spot value");

    repeat (3) @(negedge clk);
    rst_n = 1;

    // Ozone code
    pc = 0;
    ispm_write(pc++, enc(OP_LI, 1, 0, 0, int'(DSPM_BASE[31:0])));
    for (int j = 0; j < 4; j++) begin
      ispm_write(pc++, enc(OP_LD, 2, 1, 0, X_OFF + 8 * j));
      for (int m = 0; m < 4; m++) begin
        automatic int i = (4 * j + 5 * m) % 16;
        ispm_write(pc++, enc(OP_LD,   3, 1, 0, K_OFF + 8 * i));
        ispm_write(pc++, enc(OP_LD,   4, 1, 0, N_OFF + 8 * i));
        ispm_write(pc++, enc(OP_XOR,  3, 3, 4, 0));
        ispm_write(pc++, enc(OP_SHLI, 3, 3, 0, 3));
        ispm_write(pc++, enc(OP_ADD,  3, 3, 1, 0));
        ispm_write(pc++, enc(OP_LD,   5, 3, 0, TBL_OFF[m]));
        ispm_write(pc++, enc(OP_XOR,  2, 2, 5, 0));
      end
      ispm_write(pc++, enc(OP_ST, 0, 1, 2, T_OUT + 8 * j));
    end
    ispm_write(pc++, enc(OP_LD, 0, 1, 0, T_OUT));
    ispm_write(pc++, enc(OP_HALT, 0, 0, 0, 0));

    // read-only tables
    for (int m = 0; m < 4; m++)
      for (int x = 0; x < 256; x++) dspm_write(TBL_OFF[m] + 8 * x, 64'(te[m][x]));

    thread_create(EXPECT_CYC, 'h2400);

    for (int n0 = 0; n0 < 256; n0++) begin
      for (int r = 0; r < 2; r++) begin
        for (int i = 0; i < 16; i++) begin
          key[i] = 8'($urandom);
          pt[i]  = (i == 0) ? 8'(n0) : 8'($urandom);
          dspm_write(K_OFF + 8 * i, 64'(key[i]));
          dspm_write(N_OFF + 8 * i, 64'(pt[i]));
        end
        for (int j = 0; j < 4; j++) begin
          xr[j] = $urandom;
          dspm_write(X_OFF + 8 * j, 64'(xr[j]));
        end
        thread_invoke(st, rv, t_run, t_done);
        runs++;
        check(st == ST_OK, $sformatf("n0=%0d returns", n0));
        check(rv == 64'(ref_t(0)), $sformatf("n0=%0d t0 got %h exp %h", n0, rv, ref_t(0)));
        for (int j = 1; j < 4; j++) begin
          dspm_read(T_OUT + 8 * j, w);
          check(w == 64'(ref_t(j)), $sformatf("n0=%0d t%0d", n0, j));
        end
        if (t_done < tmin) tmin = t_done;
        if (t_done > tmax) tmax = t_done;
      end
    end
    check(tmin == EXPECT_CYC && tmax == EXPECT_CYC,
          $sformatf("all %0d runs take %0d..%0d cycles, expected exactly %0d", runs, tmin, tmax, EXPECT_CYC));
    $display("AES first round: %0d runs, cycles min=%0d max=%0d", runs, tmin, tmax);
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
