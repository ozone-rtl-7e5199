// tb_ozone_arch_regs: self-checking test of the Ozone register set.
//
// Random writes and reads on both read ports against a reference array,
// read-during-write returning the old value, `ret_data` tracking register 0,
// and `clear` returning every register to zero. Ends with a TB_RESULT line.
module tb_ozone_arch_regs;
  localparam int unsigned NREGS = 16, XLEN = 64, RA_W = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic clear = 1'b0, we = 1'b0;
  logic [RA_W-1:0] ra1 = '0, ra2 = '0, wa = '0;
  logic [XLEN-1:0] wd = '0, rd1, rd2, ret_data;
  logic [XLEN-1:0] model [NREGS];
  int checks = 0, failures = 0;

  ozone_arch_regs #(.NREGS(NREGS), .XLEN(XLEN), .RET_REG(0)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    foreach (model[i]) model[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NREGS; i++) begin
      ra1 = RA_W'(i); #1;
      check(rd1 == 0, "zero after reset");
    end
    @(negedge clk);
    for (int it = 0; it < 3; it++) begin
      for (int i = 0; i < 300; i++) begin
        we = 1'($urandom); wa = RA_W'($urandom); wd = {$urandom, $urandom};
        ra1 = RA_W'($urandom); ra2 = wa;
        #1;
        check(rd1 == model[ra1], "read port 1");
        check(rd2 == model[ra2], "read port 2 old value during write");
        check(ret_data == model[0], "ret_data is register 0");
        @(negedge clk);
        if (we) model[wa] = wd;
      end
      we = 1'b1; wa = 3; wd = 64'hDEAD; clear = 1'b1;
      @(negedge clk);
      clear = 1'b0; we = 1'b0;
      foreach (model[i]) model[i] = '0;
      for (int i = 0; i < NREGS; i++) begin
        ra1 = RA_W'(i); #1;
        check(rd1 == 0, "clear zeroes every register");
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
