// ozone_ctx_reg: the 80-bit Ozone thread context.
//
// Holds what ozone_thread_create hands to the hardware: the exact cycle budget
// of one invocation, the instruction and data scratchpad allocations and the
// entry point of the Ozone code (layout in ozone_pkg::ozone_ctx_t), plus a valid
// bit. `create` writes the context and sets valid, `destroy` clears both; both
// take effect at the next clock edge and are ignored while `lock` is high (the
// thread is running), so a running invocation cannot have its budget changed.
// Reset leaves no thread.
//
// Follows the original design: one thread context of 80 bits. This design's own
// choices: the field split and the lock.
module ozone_ctx_reg
  import ozone_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       create,
  input  logic       destroy,
  input  logic       lock,
  input  ozone_ctx_t ctx_in,
  output ozone_ctx_t ctx,
  output logic       valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctx   <= '0;
      valid <= 1'b0;
    end else if (!lock) begin
      if (create) begin
        ctx   <= ctx_in;
        valid <= 1'b1;
      end else if (destroy) begin
        ctx   <= '0;
        valid <= 1'b0;
      end
    end
  end

endmodule
