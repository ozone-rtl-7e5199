// tb_ozone_ispm: self-checking test of the instruction scratchpad, full size.
//
// The host fills random words at random addresses (and the first and last word)
// while not in Ozone mode, reads them back with one-cycle latency, then in Ozone
// mode the fetch port reads them with the same latency while host requests are
// refused (h_err) and host writes have no effect. Ends with a TB_RESULT line.
module tb_ozone_ispm;
  localparam int unsigned BYTES = 32768, WORD_W = 64;
  localparam int unsigned DEPTH = BYTES / 8, AW = $clog2(DEPTH);
  logic clk = 1'b0, rst_n = 1'b0, ozone_mode = 1'b0;
  logic f_req = 1'b0, h_req = 1'b0, h_we = 1'b0;
  logic [AW-1:0] f_addr = '0, h_addr = '0;
  logic [WORD_W-1:0] h_wdata = '0, f_rdata, h_rdata;
  logic h_err;
  logic [WORD_W-1:0] model [int];
  int unsigned addrs [$];
  int checks = 0, failures = 0;

  ozone_ispm #(.BYTES(BYTES), .WORD_W(WORD_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    addrs.push_back(0);
    addrs.push_back(DEPTH - 1);
    for (int i = 0; i < 200; i++) addrs.push_back($urandom % DEPTH);
    // host load
    foreach (addrs[i]) begin
      h_req = 1'b1; h_we = 1'b1; h_addr = AW'(addrs[i]); h_wdata = {$urandom, $urandom};
      model[addrs[i]] = h_wdata;
      @(negedge clk);
      check(!h_err, "no error outside Ozone mode");
    end
    h_req = 1'b0; h_we = 1'b0;
    // host read back, one-cycle latency
    foreach (addrs[i]) begin
      h_req = 1'b1; h_addr = AW'(addrs[i]);
      @(negedge clk);
      h_req = 1'b0;
      check(h_rdata == model[addrs[i]], $sformatf("host read %0d", addrs[i]));
    end
    // Ozone mode: fetch port, host refused
    ozone_mode = 1'b1;
    foreach (addrs[i]) begin
      f_req = 1'b1; f_addr = AW'(addrs[i]);
      h_req = 1'b1; h_we = 1'b1; h_addr = AW'(addrs[i]); h_wdata = ~model[addrs[i]];
      @(negedge clk);
      check(f_rdata == model[addrs[i]], $sformatf("fetch %0d after one cycle", addrs[i]));
      check(h_err, "host refused in Ozone mode");
    end
    f_req = 1'b0; h_req = 1'b0; h_we = 1'b0;
    @(negedge clk);
    ozone_mode = 1'b0;
    @(negedge clk);
    check(!h_err, "error clears after Ozone mode");
    foreach (addrs[i]) begin
      h_req = 1'b1; h_addr = AW'(addrs[i]);
      @(negedge clk);
      h_req = 1'b0;
      check(h_rdata == model[addrs[i]], "refused host write left no trace");
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
