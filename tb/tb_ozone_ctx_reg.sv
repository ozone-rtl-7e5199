// tb_ozone_ctx_reg: self-checking test of the thread context register.
//
// Creates contexts with random contents, checks the stored fields and the valid
// bit, checks that create and destroy are ignored while locked and that destroy
// clears the context. Ends with a TB_RESULT line.
module tb_ozone_ctx_reg;
  import ozone_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic create = 1'b0, destroy = 1'b0, lock = 1'b0;
  ozone_ctx_t ctx_in = '0, ctx;
  logic valid;
  ozone_ctx_t model;
  int checks = 0, failures = 0;

  ozone_ctx_reg dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic ozone_ctx_t rand_ctx();
    ozone_ctx_t c;
    c.num_cycles = $urandom;
    c.ispm_size  = 16'($urandom);
    c.dspm_size  = 17'($urandom);
    c.entry_pc   = 15'($urandom);
    return c;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(!valid && ctx == '0, "no thread after reset");
    check($bits(ozone_ctx_t) == 80, "context is 80 bits");
    for (int i = 0; i < 20; i++) begin
      model = rand_ctx();
      ctx_in = model; create = 1'b1;
      @(negedge clk); create = 1'b0;
      check(valid, "valid after create");
      check(ctx.num_cycles == model.num_cycles && ctx.ispm_size == model.ispm_size &&
            ctx.dspm_size == model.dspm_size && ctx.entry_pc == model.entry_pc,
            $sformatf("fields stored (%0d)", i));
      // locked: changes ignored
      lock = 1'b1; ctx_in = rand_ctx(); create = 1'b1;
      @(negedge clk); create = 1'b0; destroy = 1'b1;
      @(negedge clk); destroy = 1'b0; lock = 1'b0;
      check(valid && ctx == model, "locked context unchanged");
      if (i % 4 == 3) begin
        destroy = 1'b1;
        @(negedge clk); destroy = 1'b0;
        check(!valid && ctx == '0, "destroy clears");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
