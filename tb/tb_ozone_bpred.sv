// tb_ozone_bpred: self-checking test of the Ozone branch predictor.
//
// Drives random branches in and out of Ozone mode and checks: in Ozone mode
// every valid branch is predicted taken to its own target and no update reaches
// the main predictor; outside Ozone mode the main predictor's prediction and
// updates pass unchanged. Ends with a TB_RESULT line.
module tb_ozone_bpred;
  localparam int unsigned PC_W = 64;
  logic            ozone_mode, br_valid, main_taken, main_upd_in;
  logic [PC_W-1:0] br_target, main_target;
  logic            pred_taken, main_upd_out;
  logic [PC_W-1:0] pred_target;
  int checks = 0, failures = 0;

  ozone_bpred #(.PC_W(PC_W)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int i = 0; i < 400; i++) begin
      ozone_mode  = 1'($urandom);
      br_valid    = 1'($urandom);
      main_taken  = 1'($urandom);
      main_upd_in = 1'($urandom);
      br_target   = {$urandom, $urandom};
      main_target = {$urandom, $urandom};
      #1;
      if (ozone_mode) begin
        check(pred_taken == br_valid, "Ozone: always taken");
        if (br_valid) check(pred_target == br_target, "Ozone: decoded target");
        check(!main_upd_out, "Ozone: main predictor untouched");
      end else begin
        check(pred_taken == main_taken, "normal: main prediction");
        check(pred_target == main_target, "normal: main target");
        check(main_upd_out == main_upd_in, "normal: update passes");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
