// ozone_ctrl: Ozone mode bit and the invocation sequence.
//
// Turns an ozone_thread_invoke into a run of exactly num_cycles cycles with the
// core to itself:
//   IDLE  -> invoke with a valid context sets the Ozone mode bit, goes to FLUSH
//            (with no context the invocation is answered at once with ST_NOCTX).
//   FLUSH -> flush_req is held until the core reports flush_done, so no
//            instruction of the previous thread is left in the pipeline.
//   INIT  -> one cycle: the Ozone registers are cleared to their fixed state,
//            pred_init is pulsed if the Ozone predictor has state (STATIC_BP=0;
//            the always-taken predictor needs none), the WDT is loaded with
//            num_cycles and core_start tells the core to fetch from entry_pc.
//   RUN   -> the Ozone code runs. If the core reports core_done before the
//            WDT expires, it is halted (core_halt) until expiry. In the expiry
//            cycle core_kill stops the core, the mode bit drops at the next edge
//            and the outcome is posted: ST_OK with the return value if core_done
//            came in that very cycle, ST_TERMINATED otherwise.
// While the mode bit is set, interrupts are masked and the other hardware
// threads are stalled (irq_mask, smt_stall). result_valid is a one-cycle pulse
// one cycle after expiry, so the answer always comes num_cycles + 1 cycles after
// the INIT cycle, never sooner or later.
//
// Follows the original design: flush, predictor initialisation that a static
// predictor skips, WDT started at invoke, result only when completion and expiry
// coincide, interrupts disabled during the run. This design's own choices: the
// state encoding, halting an early finisher until expiry, clearing the registers
// to zero, taking the return value from one register, the ST_NOCTX answer.
module ozone_ctrl
  import ozone_pkg::*;
#(
  parameter bit          STATIC_BP = 1'b1,
  parameter int unsigned XLEN_P    = 64,
  parameter int unsigned CYC_W_P   = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  // from the OS / application
  input  logic               invoke,
  input  logic               ctx_valid,
  input  logic [CYC_W_P-1:0] num_cycles,
  output logic               result_valid,
  output oz_status_e         status,
  output logic [XLEN_P-1:0]  retval,
  // mode and core control
  output logic               ozone_mode,
  output oz_state_e          state,
  output logic               flush_req,
  input  logic               flush_done,
  output logic               pred_init,
  output logic               state_clear,
  output logic               core_start,
  output logic               core_halt,
  output logic               core_kill,
  input  logic               core_done,
  output logic               irq_mask,
  output logic               smt_stall,
  input  logic [XLEN_P-1:0]  ret_data,
  // watchdog timer
  output logic               wdt_start,
  output logic [CYC_W_P-1:0] wdt_load,
  output logic               wdt_stop,
  input  logic               wdt_expire
);

  oz_state_e state_q;
  logic      done_early_q;

  assign state = state_q;

  always_comb begin
    ozone_mode  = (state_q != OZ_IDLE);
    flush_req   = (state_q == OZ_FLUSH);
    state_clear = (state_q == OZ_INIT);
    pred_init   = (state_q == OZ_INIT) && !STATIC_BP;
    core_start  = (state_q == OZ_INIT);
    wdt_start   = (state_q == OZ_INIT);
    wdt_load    = num_cycles;
    wdt_stop    = 1'b0;
    core_halt   = (state_q == OZ_RUN) && done_early_q;
    core_kill   = (state_q == OZ_RUN) && wdt_expire;
    irq_mask    = ozone_mode;
    smt_stall   = ozone_mode;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= OZ_IDLE;
      done_early_q <= 1'b0;
      result_valid <= 1'b0;
      status       <= ST_NONE;
      retval       <= '0;
    end else begin
      result_valid <= 1'b0;
      unique case (state_q)
        OZ_IDLE: begin
          if (invoke) begin
            if (ctx_valid) begin
              state_q <= OZ_FLUSH;
            end else begin
              result_valid <= 1'b1;
              status       <= ST_NOCTX;
              retval       <= '0;
            end
          end
        end
        OZ_FLUSH: begin
          if (flush_done) state_q <= OZ_INIT;
        end
        OZ_INIT: begin
          done_early_q <= 1'b0;
          state_q      <= OZ_RUN;
        end
        OZ_RUN: begin
          if (wdt_expire) begin
            state_q      <= OZ_IDLE;
            result_valid <= 1'b1;
            if (core_done && !done_early_q) begin
              status <= ST_OK;
              retval <= ret_data;
            end else begin
              status <= ST_TERMINATED;
              retval <= '0;
            end
            done_early_q <= 1'b0;
          end else if (core_done) begin
            done_early_q <= 1'b1;
          end
        end
        default: state_q <= OZ_IDLE;
      endcase
    end
  end

  // A started thread always ends at WDT expiry, which the WDT guarantees.
  property p_run_ends_with_mode;
    @(posedge clk) disable iff (!rst_n) (state_q == OZ_RUN && wdt_expire) |=> !ozone_mode;
  endproperty
  a_run_ends_with_mode: assert property (p_run_ends_with_mode);

endmodule
