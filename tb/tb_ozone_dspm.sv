// tb_ozone_dspm: self-checking test of the data scratchpad, full size.
//
// The host zeroes and fills a set of words, the core port then does random
// byte-masked writes and reads in Ozone mode against a reference model, with
// every read answered in the next cycle; host requests in Ozone mode are refused
// (h_err) and leave the memory unchanged. Ends with a TB_RESULT line.
module tb_ozone_dspm;
  localparam int unsigned BYTES = 65536, WORD_W = 64;
  localparam int unsigned DEPTH = BYTES / 8, AW = $clog2(DEPTH);
  logic clk = 1'b0, rst_n = 1'b0, ozone_mode = 1'b0;
  logic d_req = 1'b0, d_we = 1'b0, h_req = 1'b0, h_we = 1'b0;
  logic [7:0] d_be = '0, h_be = '0;
  logic [AW-1:0] d_addr = '0, h_addr = '0;
  logic [WORD_W-1:0] d_wdata = '0, h_wdata = '0, d_rdata, h_rdata;
  logic h_err;
  logic [WORD_W-1:0] model [int];
  int unsigned addrs [$];
  int checks = 0, failures = 0;

  ozone_dspm #(.BYTES(BYTES), .WORD_W(WORD_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [63:0] merge(input logic [63:0] old, input logic [63:0] nw,
                                        input logic [7:0] be);
    logic [63:0] r = old;
    for (int b = 0; b < 8; b++) if (be[b]) r[8*b +: 8] = nw[8*b +: 8];
    return r;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    addrs.push_back(0);
    addrs.push_back(DEPTH - 1);
    for (int i = 0; i < 100; i++) addrs.push_back($urandom % DEPTH);
    // host zero-fill then masked load
    foreach (addrs[i]) begin
      h_req = 1'b1; h_we = 1'b1; h_be = 8'hFF; h_addr = AW'(addrs[i]); h_wdata = '0;
      model[addrs[i]] = '0;
      @(negedge clk);
    end
    foreach (addrs[i]) begin
      h_be = 8'($urandom); h_addr = AW'(addrs[i]); h_wdata = {$urandom, $urandom};
      model[addrs[i]] = merge(model[addrs[i]], h_wdata, h_be);
      @(negedge clk);
    end
    h_req = 1'b0; h_we = 1'b0;
    // Ozone mode: core port traffic
    ozone_mode = 1'b1;
    for (int i = 0; i < 600; i++) begin
      automatic int unsigned a = addrs[$urandom % addrs.size()];
      d_req = 1'b1; d_addr = AW'(a);
      d_we = 1'($urandom); d_be = 8'($urandom); d_wdata = {$urandom, $urandom};
      h_req = 1'($urandom); h_we = 1'b1; h_be = 8'hFF; h_addr = AW'(a); h_wdata = '1;
      @(negedge clk);
      if (h_req) check(h_err, "host refused in Ozone mode");
      if (d_we) model[a] = merge(model[a], d_wdata, d_be);
      else      check(d_rdata == model[a], $sformatf("core read %0d after one cycle", a));
    end
    d_req = 1'b0; h_req = 1'b0;
    @(negedge clk);
    ozone_mode = 1'b0; h_we = 1'b0;
    @(negedge clk);
    foreach (addrs[i]) begin
      h_req = 1'b1; h_addr = AW'(addrs[i]);
      @(negedge clk);
      h_req = 1'b0;
      check(h_rdata == model[addrs[i]], "host sees core results");
      check(!h_err, "no error outside Ozone mode");
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
