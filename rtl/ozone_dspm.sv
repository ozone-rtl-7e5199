// ozone_dspm: data scratchpad of the Ozone thread.
//
// An uncached, single-ported RAM of BYTES bytes organised as WORD_W-bit words
// with a write enable per byte. It holds the Ozone code's data, its read-only
// tables and its stack. Every access takes exactly one cycle: a read issued in
// cycle t returns its word in cycle t+1, a write is done at the end of cycle t.
// The port belongs to the core's data side while `ozone_mode` is high and to the
// host (the OS zeroing and loading data, or collecting results) otherwise; a
// host request made in Ozone mode is refused and `h_err` is high in the
// following cycle. Addresses are word indices.
//
// Follows the original design: 64 KiB, dedicated, fixed latency, exclusive to
// the Ozone thread while it lives. This design's own choices: the 64-bit word,
// byte enables, the one-cycle latency and the host port with its refusal flag.
module ozone_dspm #(
  parameter int unsigned BYTES  = 65536,
  parameter int unsigned WORD_W = 64,
  localparam int unsigned NBE   = WORD_W / 8,
  localparam int unsigned DEPTH = BYTES / NBE,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ozone_mode,
  // core data port (Ozone mode)
  input  logic              d_req,
  input  logic              d_we,
  input  logic [NBE-1:0]    d_be,
  input  logic [AW-1:0]     d_addr,
  input  logic [WORD_W-1:0] d_wdata,
  output logic [WORD_W-1:0] d_rdata,
  // host port (normal mode)
  input  logic              h_req,
  input  logic              h_we,
  input  logic [NBE-1:0]    h_be,
  input  logic [AW-1:0]     h_addr,
  input  logic [WORD_W-1:0] h_wdata,
  output logic [WORD_W-1:0] h_rdata,
  output logic              h_err
);

  logic [WORD_W-1:0] mem [DEPTH];
  logic [WORD_W-1:0] rdata_q;
  logic              p_re, p_we;
  logic [NBE-1:0]    p_be;
  logic [AW-1:0]     p_addr;
  logic [WORD_W-1:0] p_wdata;

  always_comb begin
    if (ozone_mode) begin
      p_re    = d_req && !d_we;
      p_we    = d_req && d_we;
      p_be    = d_be;
      p_addr  = d_addr;
      p_wdata = d_wdata;
    end else begin
      p_re    = h_req && !h_we;
      p_we    = h_req && h_we;
      p_be    = h_be;
      p_addr  = h_addr;
      p_wdata = h_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (p_we) begin
      for (int b = 0; b < NBE; b++) begin
        if (p_be[b]) mem[p_addr][8*b +: 8] <= p_wdata[8*b +: 8];
      end
    end
    if (p_re) rdata_q <= mem[p_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) h_err <= 1'b0;
    else        h_err <= ozone_mode && h_req;
  end

  assign d_rdata = rdata_q;
  assign h_rdata = rdata_q;

endmodule
