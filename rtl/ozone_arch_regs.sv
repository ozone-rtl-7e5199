// ozone_arch_regs: architectural registers of the Ozone hardware thread.
//
// A private register set (NREGS x XLEN) used only by the Ozone thread, so the
// normal threads' state is never touched and Ozone execution always starts from
// the same register contents. Two combinational read ports, one write port
// written at the clock edge; a read in the same cycle as a write to the same
// register returns the old value. `clear` (one cycle, at invoke) sets every
// register to zero, the fixed initial state, and wins over a write. `ret_data`
// always shows register RET_REG, from which the return value is taken.
//
// Follows the original design: a separate Ozone architectural state that starts
// every invocation from a known state. This design's own choices: 16 x 64-bit
// registers (an x86-64 style core), zero as the initial value, the port count.
module ozone_arch_regs #(
  parameter int unsigned NREGS   = 16,
  parameter int unsigned XLEN    = 64,
  parameter int unsigned RET_REG = 0,
  localparam int unsigned RA_W   = $clog2(NREGS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic [RA_W-1:0] ra1,
  output logic [XLEN-1:0] rd1,
  input  logic [RA_W-1:0] ra2,
  output logic [XLEN-1:0] rd2,
  input  logic            we,
  input  logic [RA_W-1:0] wa,
  input  logic [XLEN-1:0] wd,
  output logic [XLEN-1:0] ret_data
);

  logic [XLEN-1:0] regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we) begin
      regs[wa] <= wd;
    end
  end

  assign rd1      = regs[ra1];
  assign rd2      = regs[ra2];
  assign ret_data = regs[RET_REG];

endmodule
