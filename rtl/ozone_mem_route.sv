// ozone_mem_route: steers the core's memory ports between scratchpads and caches.
//
// The core has one fetch port and one data port, both using byte addresses.
// While `ozone_mode` is high every request goes to the scratchpads and none to
// the caches, so an Ozone thread neither sees cache timing nor leaves a trace in
// the caches. A fetch address must lie in [ISPM_BASE, ISPM_BASE + ispm_size) and
// a data address in [DSPM_BASE, DSPM_BASE + dspm_size), the windows allocated in
// the thread context; an access outside them is dropped (a read returns zero,
// with the same one-cycle latency) and `addr_fault` is high in the cycle of the
// request. Outside Ozone mode the requests go to the caches unchanged and their
// answers are passed back when the cache marks them valid.
//
// Timing: scratchpad answers come one cycle after the request (rvalid high
// then); cache answers come whenever the cache gives them. Data words are
// aligned: the low three address bits are ignored.
//
// Follows the original design: Ozone code reaches only the scratchpads, which
// sit at fixed addresses, and never the caches. This design's own choices: the
// base addresses, the window check against the allocated sizes and what a
// faulting access does.
module ozone_mem_route
  import ozone_pkg::*;
#(
  parameter logic [63:0] I_BASE = ISPM_BASE,
  parameter logic [63:0] D_BASE = DSPM_BASE,
  parameter int unsigned I_BYTES = ISPM_BYTES,
  parameter int unsigned D_BYTES = DSPM_BYTES,
  localparam int unsigned IAW = $clog2(I_BYTES / 8),
  localparam int unsigned DAW = $clog2(D_BYTES / 8)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ozone_mode,
  input  logic [15:0] ispm_size,
  input  logic [16:0] dspm_size,
  // core fetch port
  input  logic        cf_req,
  input  logic [63:0] cf_addr,
  output logic [63:0] cf_rdata,
  output logic        cf_rvalid,
  // core data port
  input  logic        cd_req,
  input  logic        cd_we,
  input  logic [7:0]  cd_be,
  input  logic [63:0] cd_addr,
  input  logic [63:0] cd_wdata,
  output logic [63:0] cd_rdata,
  output logic        cd_rvalid,
  // instruction scratchpad
  output logic           i_req,
  output logic [IAW-1:0] i_addr,
  input  logic [63:0]    i_rdata,
  // data scratchpad
  output logic           d_req,
  output logic           d_we,
  output logic [7:0]     d_be,
  output logic [DAW-1:0] d_addr,
  output logic [63:0]    d_wdata,
  input  logic [63:0]    d_rdata,
  // instruction cache
  output logic        ic_req,
  output logic [63:0] ic_addr,
  input  logic [63:0] ic_rdata,
  input  logic        ic_rvalid,
  // data cache
  output logic        dc_req,
  output logic        dc_we,
  output logic [7:0]  dc_be,
  output logic [63:0] dc_addr,
  output logic [63:0] dc_wdata,
  input  logic [63:0] dc_rdata,
  input  logic        dc_rvalid,
  // Ozone access outside its windows
  output logic        addr_fault
);

  logic [63:0] i_off, d_off;
  logic        i_in, d_in;
  logic        if_fault, df_fault;
  // answers due from the scratchpads next cycle, and whether they were dropped
  logic        i_pend_q, i_drop_q, d_pend_q, d_drop_q;

  assign i_off = cf_addr - I_BASE;
  assign d_off = cd_addr - D_BASE;
  assign i_in  = (cf_addr >= I_BASE) && (i_off < 64'(ispm_size));
  assign d_in  = (cd_addr >= D_BASE) && (d_off < 64'(dspm_size));

  always_comb begin
    if_fault = ozone_mode && cf_req && !i_in;
    df_fault = ozone_mode && cd_req && !d_in;

    i_req   = ozone_mode && cf_req && i_in;
    i_addr  = i_off[3 +: IAW];
    d_req   = ozone_mode && cd_req && d_in;
    d_we    = cd_we;
    d_be    = cd_be;
    d_addr  = d_off[3 +: DAW];
    d_wdata = cd_wdata;

    ic_req   = !ozone_mode && cf_req;
    ic_addr  = cf_addr;
    dc_req   = !ozone_mode && cd_req;
    dc_we    = cd_we;
    dc_be    = cd_be;
    dc_addr  = cd_addr;
    dc_wdata = cd_wdata;

    addr_fault = if_fault || df_fault;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_pend_q <= 1'b0;
      i_drop_q <= 1'b0;
      d_pend_q <= 1'b0;
      d_drop_q <= 1'b0;
    end else begin
      i_pend_q <= ozone_mode && cf_req;
      i_drop_q <= if_fault;
      d_pend_q <= ozone_mode && cd_req && !cd_we;
      d_drop_q <= df_fault;
    end
  end

  assign cf_rvalid = i_pend_q || (!i_pend_q && ic_rvalid);
  assign cf_rdata  = i_pend_q ? (i_drop_q ? 64'd0 : i_rdata) : ic_rdata;
  assign cd_rvalid = d_pend_q || (!d_pend_q && dc_rvalid);
  assign cd_rdata  = d_pend_q ? (d_drop_q ? 64'd0 : d_rdata) : dc_rdata;

endmodule
