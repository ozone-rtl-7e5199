// ozone_top: the Ozone execution resource attached to a core.
//
// Gathers everything a core needs to run one Ozone thread with zero timing
// leakage: the Ozone mode bit and invocation sequencer (ozone_ctrl), the 80-bit
// thread context (ozone_ctx_reg), the watchdog timer (ozone_wdt), the private
// register set (ozone_arch_regs), the stateless always-taken predictor
// (ozone_bpred), the 32 KiB instruction and 64 KiB data scratchpads
// (ozone_ispm, ozone_dspm) and the steering of the core's memory ports between
// scratchpads and caches (ozone_mem_route).
//
// The core itself, its caches, its main branch predictor and memory are not part
// of this design; their signals are ports:
//   OS side   : create/destroy/ctx_in (ozone_thread_create/destroy), invoke,
//               result_valid/status/retval, host ports into both scratchpads.
//   core side : flush handshake, core_start with entry_pc, core_halt, core_kill,
//               core_done, irq_mask, smt_stall, fetch and data ports, the Ozone
//               register ports, the branch-prediction ports.
//   cache side: request ports to the instruction and data caches and the main
//               predictor's prediction and update.
// Timing: the core may start fetching from ISPM_BASE + entry_pc in the cycle
// after core_start; the run ends in the num_cycles-th cycle after that edge
// (core_kill), and result_valid pulses one cycle later.
//
// Follows the original design: the grouping of Ozone-only, Ozone-borrowed and
// off-limits resources, and the invoke sequence. Port naming and widths are this
// design's.
module ozone_top
  import ozone_pkg::*;
#(
  parameter int unsigned I_BYTES   = ISPM_BYTES,
  parameter int unsigned D_BYTES   = DSPM_BYTES,
  parameter bit          STATIC_BP = 1'b1,
  localparam int unsigned IAW = $clog2(I_BYTES / WORD_BYTES),
  localparam int unsigned DAW = $clog2(D_BYTES / WORD_BYTES)
) (
  input  logic              clk,
  input  logic              rst_n,
  // ---- OS / application ----
  input  logic              create,
  input  logic              destroy,
  input  ozone_ctx_t        ctx_in,
  output logic              ctx_valid,
  input  logic              invoke,
  output logic              result_valid,
  output oz_status_e        status,
  output logic [XLEN-1:0]   retval,
  input  logic              ih_req,
  input  logic              ih_we,
  input  logic [IAW-1:0]    ih_addr,
  input  logic [WORD_W-1:0] ih_wdata,
  output logic [WORD_W-1:0] ih_rdata,
  output logic              ih_err,
  input  logic              dh_req,
  input  logic              dh_we,
  input  logic [7:0]        dh_be,
  input  logic [DAW-1:0]    dh_addr,
  input  logic [WORD_W-1:0] dh_wdata,
  output logic [WORD_W-1:0] dh_rdata,
  output logic              dh_err,
  // ---- core control ----
  output logic              ozone_mode,
  output logic              flush_req,
  input  logic              flush_done,
  output logic              pred_init,
  output logic              core_start,
  output logic [14:0]       entry_pc,
  output logic              core_halt,
  output logic              core_kill,
  input  logic              core_done,
  output logic              irq_mask,
  output logic              smt_stall,
  // ---- core memory ports ----
  input  logic              cf_req,
  input  logic [63:0]       cf_addr,
  output logic [63:0]       cf_rdata,
  output logic              cf_rvalid,
  input  logic              cd_req,
  input  logic              cd_we,
  input  logic [7:0]        cd_be,
  input  logic [63:0]       cd_addr,
  input  logic [63:0]       cd_wdata,
  output logic [63:0]       cd_rdata,
  output logic              cd_rvalid,
  output logic              addr_fault,
  // ---- Ozone register ports ----
  input  logic [RA_W-1:0]   rf_ra1,
  output logic [XLEN-1:0]   rf_rd1,
  input  logic [RA_W-1:0]   rf_ra2,
  output logic [XLEN-1:0]   rf_rd2,
  input  logic              rf_we,
  input  logic [RA_W-1:0]   rf_wa,
  input  logic [XLEN-1:0]   rf_wd,
  // ---- branch prediction ----
  input  logic              br_valid,
  input  logic [63:0]       br_target,
  output logic              pred_taken,
  output logic [63:0]       pred_target,
  input  logic              main_taken,
  input  logic [63:0]       main_target,
  input  logic              main_upd_in,
  output logic              main_upd_out,
  // ---- caches ----
  output logic              ic_req,
  output logic [63:0]       ic_addr,
  input  logic [63:0]       ic_rdata,
  input  logic              ic_rvalid,
  output logic              dc_req,
  output logic              dc_we,
  output logic [7:0]        dc_be,
  output logic [63:0]       dc_addr,
  output logic [63:0]       dc_wdata,
  input  logic [63:0]       dc_rdata,
  input  logic              dc_rvalid,
  // ---- watchdog observation ----
  output logic [CYC_W-1:0]  wdt_remaining
);

  ozone_ctx_t        ctx;
  oz_state_e         ctrl_state;
  logic              state_clear;
  logic              wdt_start, wdt_stop, wdt_expire, wdt_running;
  logic [CYC_W-1:0]  wdt_load;
  logic [XLEN-1:0]   ret_data;
  logic              i_req, d_req, d_we;
  logic [7:0]        d_be;
  logic [IAW-1:0]    i_addr;
  logic [DAW-1:0]    d_addr;
  logic [63:0]       i_rdata, d_rdata, d_wdata;

  assign entry_pc = ctx.entry_pc;

  ozone_ctx_reg u_ctx (
    .clk, .rst_n, .create, .destroy,
    .lock   (ozone_mode),
    .ctx_in,
    .ctx,
    .valid  (ctx_valid)
  );

  ozone_ctrl #(
    .STATIC_BP (STATIC_BP),
    .XLEN_P    (XLEN),
    .CYC_W_P   (CYC_W)
  ) u_ctrl (
    .clk, .rst_n, .invoke, .ctx_valid,
    .num_cycles (ctx.num_cycles),
    .result_valid, .status, .retval,
    .ozone_mode,
    .state      (ctrl_state),
    .flush_req, .flush_done, .pred_init, .state_clear,
    .core_start, .core_halt, .core_kill, .core_done,
    .irq_mask, .smt_stall,
    .ret_data,
    .wdt_start, .wdt_load, .wdt_stop, .wdt_expire
  );

  ozone_wdt #(.CYC_W(CYC_W)) u_wdt (
    .clk, .rst_n,
    .start      (wdt_start),
    .load_value (wdt_load),
    .stop       (wdt_stop),
    .running    (wdt_running),
    .expire     (wdt_expire),
    .remaining  (wdt_remaining)
  );

  ozone_arch_regs #(
    .NREGS   (NREGS),
    .XLEN    (XLEN),
    .RET_REG (RET_REG)
  ) u_regs (
    .clk, .rst_n,
    .clear    (state_clear),
    .ra1      (rf_ra1),
    .rd1      (rf_rd1),
    .ra2      (rf_ra2),
    .rd2      (rf_rd2),
    .we       (rf_we && ozone_mode),
    .wa       (rf_wa),
    .wd       (rf_wd),
    .ret_data
  );

  ozone_bpred #(.PC_W(64)) u_bp (
    .ozone_mode, .br_valid, .br_target, .main_taken, .main_target,
    .main_upd_in, .pred_taken, .pred_target, .main_upd_out
  );

  ozone_mem_route #(
    .I_BASE  (ISPM_BASE),
    .D_BASE  (DSPM_BASE),
    .I_BYTES (I_BYTES),
    .D_BYTES (D_BYTES)
  ) u_route (
    .clk, .rst_n, .ozone_mode,
    .ispm_size (ctx.ispm_size),
    .dspm_size (ctx.dspm_size),
    .cf_req, .cf_addr, .cf_rdata, .cf_rvalid,
    .cd_req, .cd_we, .cd_be, .cd_addr, .cd_wdata, .cd_rdata, .cd_rvalid,
    .i_req, .i_addr, .i_rdata,
    .d_req, .d_we, .d_be, .d_addr, .d_wdata, .d_rdata,
    .ic_req, .ic_addr, .ic_rdata, .ic_rvalid,
    .dc_req, .dc_we, .dc_be, .dc_addr, .dc_wdata, .dc_rdata, .dc_rvalid,
    .addr_fault
  );

  ozone_ispm #(.BYTES(I_BYTES), .WORD_W(WORD_W)) u_ispm (
    .clk, .rst_n, .ozone_mode,
    .f_req   (i_req),
    .f_addr  (i_addr),
    .f_rdata (i_rdata),
    .h_req   (ih_req),
    .h_we    (ih_we),
    .h_addr  (ih_addr),
    .h_wdata (ih_wdata),
    .h_rdata (ih_rdata),
    .h_err   (ih_err)
  );

  ozone_dspm #(.BYTES(D_BYTES), .WORD_W(WORD_W)) u_dspm (
    .clk, .rst_n, .ozone_mode,
    .d_req, .d_we, .d_be, .d_addr, .d_wdata, .d_rdata,
    .h_req   (dh_req),
    .h_we    (dh_we),
    .h_be    (dh_be),
    .h_addr  (dh_addr),
    .h_wdata (dh_wdata),
    .h_rdata (dh_rdata),
    .h_err   (dh_err)
  );

  // The WDT runs exactly while the controller is in RUN.
  a_wdt_in_run: assert property (@(posedge clk) disable iff (!rst_n)
    wdt_running |-> (ctrl_state == OZ_RUN));

endmodule
