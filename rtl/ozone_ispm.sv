// ozone_ispm: instruction scratchpad of the Ozone thread.
//
// An uncached, single-ported RAM of BYTES bytes organised as WORD_W-bit words.
// Every read takes exactly one cycle: the word addressed in cycle t appears on
// the read data output in cycle t+1, whatever was accessed before. This fixed
// latency is what lets Ozone code fetch without timing variation. The port is
// owned by the core's fetch side while `ozone_mode` is high and by the host (the
// OS loading code) otherwise; a host request made in Ozone mode is refused and
// `h_err` is high in the following cycle. Addresses are word indices.
//
// Follows the original design: 32 KiB, dedicated, fixed latency, exclusive to
// the Ozone thread while it lives. This design's own choices: the 64-bit word,
// the one-cycle latency and the host port with its refusal flag.
module ozone_ispm #(
  parameter int unsigned BYTES  = 32768,
  parameter int unsigned WORD_W = 64,
  localparam int unsigned DEPTH = BYTES / (WORD_W / 8),
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ozone_mode,
  // core fetch port (Ozone mode)
  input  logic              f_req,
  input  logic [AW-1:0]     f_addr,
  output logic [WORD_W-1:0] f_rdata,
  // host port (normal mode)
  input  logic              h_req,
  input  logic              h_we,
  input  logic [AW-1:0]     h_addr,
  input  logic [WORD_W-1:0] h_wdata,
  output logic [WORD_W-1:0] h_rdata,
  output logic              h_err
);

  logic [WORD_W-1:0] mem [DEPTH];
  logic [WORD_W-1:0] rdata_q;
  logic              p_re, p_we;
  logic [AW-1:0]     p_addr;

  always_comb begin
    if (ozone_mode) begin
      p_re   = f_req;
      p_we   = 1'b0;
      p_addr = f_addr;
    end else begin
      p_re   = h_req && !h_we;
      p_we   = h_req && h_we;
      p_addr = h_addr;
    end
  end

  always_ff @(posedge clk) begin
    if (p_we) mem[p_addr] <= h_wdata;
    if (p_re) rdata_q <= mem[p_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) h_err <= 1'b0;
    else        h_err <= ozone_mode && h_req;
  end

  assign f_rdata = rdata_q;
  assign h_rdata = rdata_q;

endmodule
