// ozone_pkg: sizes and types shared by the Ozone execution resource.
//
// The Ozone resource lets one hardware thread run a block of input-independent
// code for a fixed, preset number of cycles with exclusive use of a core, out of
// private instruction and data scratchpads. This package holds the sizes of the
// scratchpads (32 KiB instruction, 64 KiB data, as in the cost estimate of the
// original design), the 80-bit thread context and the encodings of the
// controller state and of the invocation outcome.
//
// Follows the original design: scratchpad sizes and the 80-bit context size.
// This design's own choices: the field split of the context, the 64-bit data
// path and the 16-entry register set of the Ozone thread (an x86-64 style core
// is assumed), the enum encodings.
package ozone_pkg;

  localparam int unsigned XLEN       = 64;     // register and data width
  localparam int unsigned NREGS      = 16;     // Ozone architectural registers
  localparam int unsigned RA_W       = $clog2(NREGS);
  localparam int unsigned RET_REG    = 0;      // register holding the return value
  localparam int unsigned ISPM_BYTES = 32768;  // 32k x 8 instruction scratchpad
  localparam int unsigned DSPM_BYTES = 65536;  // 64k x 8 data scratchpad
  localparam int unsigned WORD_W     = 64;     // scratchpad word width
  localparam int unsigned WORD_BYTES = WORD_W / 8;
  localparam int unsigned CYC_W      = 32;     // watchdog counter width
  localparam int unsigned CTX_BITS   = 80;     // thread context size

  // Fixed addresses at which the scratchpads appear to Ozone code.
  localparam logic [XLEN-1:0] ISPM_BASE = 64'h0000_0000_F000_0000;
  localparam logic [XLEN-1:0] DSPM_BASE = 64'h0000_0000_F010_0000;

  // 80-bit Ozone thread context, written by ozone_thread_create.
  typedef struct packed {
    logic [31:0] num_cycles;  // exact cycle budget of one invocation
    logic [15:0] ispm_size;   // bytes of instruction scratchpad allocated
    logic [16:0] dspm_size;   // bytes of data scratchpad allocated (with stack)
    logic [14:0] entry_pc;    // byte offset of the entry point in the ISPM
  } ozone_ctx_t;

  // Invocation sequencer states.
  typedef enum logic [1:0] {
    OZ_IDLE  = 2'd0,  // normal threads own the core
    OZ_FLUSH = 2'd1,  // draining the pipeline of the previous thread
    OZ_INIT  = 2'd2,  // setting the fixed initial state, starting the WDT
    OZ_RUN   = 2'd3   // Ozone code executing under the WDT
  } oz_state_e;

  // Outcome of an invocation.
  typedef enum logic [1:0] {
    ST_NONE       = 2'd0,
    ST_OK         = 2'd1,  // finished in the very cycle the WDT expired
    ST_TERMINATED = 2'd2,  // finished early or not at all: result withheld
    ST_NOCTX      = 2'd3   // invoked with no thread created
  } oz_status_e;

endpackage
