// tb_ozone_mem_route: self-checking test of the scratchpad/cache steering.
//
// Random fetch and data requests in and out of Ozone mode, with random
// addresses inside and outside the allocated windows. Checks that in Ozone mode
// nothing reaches the caches, in-window requests reach the scratchpads with the
// right word index, out-of-window ones raise addr_fault and read back zero one
// cycle later; outside Ozone mode everything goes to the caches and their
// answers come back when valid. Ends with a TB_RESULT line.
module tb_ozone_mem_route;
  import ozone_pkg::*;
  localparam int unsigned IAW = 12, DAW = 13;
  logic clk = 1'b0, rst_n = 1'b0, ozone_mode = 1'b0;
  logic [15:0] ispm_size = 16'd4096;
  logic [16:0] dspm_size = 17'd2048;
  logic cf_req = 1'b0, cd_req = 1'b0, cd_we = 1'b0;
  logic [63:0] cf_addr = '0, cd_addr = '0, cd_wdata = '0;
  logic [7:0] cd_be = '0;
  logic [63:0] cf_rdata, cd_rdata;
  logic cf_rvalid, cd_rvalid;
  logic i_req, d_req, d_we;
  logic [IAW-1:0] i_addr;
  logic [DAW-1:0] d_addr;
  logic [7:0] d_be;
  logic [63:0] i_rdata = '0, d_rdata = '0, d_wdata;
  logic ic_req, dc_req, dc_we;
  logic [63:0] ic_addr, dc_addr, dc_wdata;
  logic [7:0] dc_be;
  logic [63:0] ic_rdata = '0, dc_rdata = '0;
  logic ic_rvalid = 1'b0, dc_rvalid = 1'b0;
  logic addr_fault;
  int checks = 0, failures = 0;
  int n_fault = 0, n_spm = 0, n_cache = 0;

  ozone_mem_route dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [63:0] pick(input logic [63:0] base, input int unsigned size);
    case ($urandom % 4)
      0: return base + 64'(($urandom % size) & ~7);     // inside
      1: return base + 64'(size) + 64'($urandom % 64);  // just past the allocation
      2: return base - 64'(8 + ($urandom % 64));        // below the window
      default: return base + 64'(($urandom % size) & ~7);
    endcase
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 1000; i++) begin
      bit f_in, d_in;
      logic [63:0] iword, dword;
      ozone_mode = (i % 200) < 140;
      cf_req = 1'($urandom); cd_req = 1'($urandom); cd_we = 1'($urandom);
      cf_addr = pick(ISPM_BASE, ispm_size);
      cd_addr = pick(DSPM_BASE, dspm_size);
      cd_be = 8'($urandom); cd_wdata = {$urandom, $urandom};
      f_in = (cf_addr >= ISPM_BASE) && (cf_addr < ISPM_BASE + 64'(ispm_size));
      d_in = (cd_addr >= DSPM_BASE) && (cd_addr < DSPM_BASE + 64'(dspm_size));
      #1;
      if (ozone_mode) begin
        check(!ic_req && !dc_req, "Ozone mode never touches the caches");
        check(i_req == (cf_req && f_in), "fetch to ISPM only in window");
        check(d_req == (cd_req && d_in), "data to DSPM only in window");
        if (i_req) check(i_addr == IAW'((cf_addr - ISPM_BASE) >> 3), "ISPM word index");
        if (d_req) check(d_addr == DAW'((cd_addr - DSPM_BASE) >> 3) && d_we == cd_we &&
                         d_be == cd_be && d_wdata == cd_wdata, "DSPM request fields");
        check(addr_fault == ((cf_req && !f_in) || (cd_req && !d_in)), "addr_fault");
        if (addr_fault) n_fault++;
        if (i_req || d_req) n_spm++;
      end else begin
        check(!i_req && !d_req && !addr_fault, "normal mode avoids the scratchpads");
        check(ic_req == cf_req && dc_req == cd_req, "normal mode uses the caches");
        if (cf_req) check(ic_addr == cf_addr, "icache address");
        if (cd_req) check(dc_addr == cd_addr && dc_we == cd_we && dc_wdata == cd_wdata, "dcache fields");
        if (cf_req || cd_req) n_cache++;
      end
      @(negedge clk);
      // answers of this request, one cycle later
      iword = {$urandom, $urandom}; dword = {$urandom, $urandom};
      i_rdata = iword; d_rdata = dword;
      ic_rdata = ~iword; dc_rdata = ~dword;
      ic_rvalid = 1'b1; dc_rvalid = 1'b1;
      cf_req = 1'b0; cd_req = 1'b0;
      #3;
      ic_rvalid = 1'b0; dc_rvalid = 1'b0;
    end
    check(n_fault > 0 && n_spm > 0 && n_cache > 0, "all paths exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Read-data check: sampled at each negedge after a request cycle.
  logic        was_oz, was_f, was_fin, was_d, was_din, was_dwe;
  always @(posedge clk) begin
    was_oz  <= ozone_mode;
    was_f   <= cf_req;
    was_fin <= i_req;
    was_d   <= cd_req && !cd_we;
    was_din <= d_req;
    was_dwe <= cd_we;
  end
  always @(negedge clk) begin
    #2;
    if (rst_n && was_oz && was_f) begin
      check(cf_rvalid, "fetch answer after one cycle");
      check(cf_rdata == (was_fin ? i_rdata : 64'd0), "fetch data or zero on fault");
    end
    if (rst_n && was_oz && was_d) begin
      check(cd_rvalid, "load answer after one cycle");
      check(cd_rdata == (was_din ? d_rdata : 64'd0), "load data or zero on fault");
    end
    if (rst_n && !was_oz && ic_rvalid) check(cf_rdata == ic_rdata, "icache answer passes");
    if (rst_n && !was_oz && !ic_rvalid && !was_f) check(!cf_rvalid, "no spurious fetch answer");
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
