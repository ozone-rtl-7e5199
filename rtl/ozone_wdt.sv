// ozone_wdt: watchdog timer of the Ozone thread.
//
// Bounds an Ozone invocation to exactly the number of cycles given when the
// thread was created. A pulse on `start` loads `load_value` (N) and starts a
// down-counter; the counter runs in the N cycles that follow, and `expire` is
// high in the last of them (the N-th cycle after the one in which `start` was
// sampled). At expiry the counter stops by itself; `stop` aborts it early.
// N = 0 behaves like N = 1. `remaining` is the number of cycles left including
// the current one (0 when idle).
//
// Follows the original design: a timer started at invoke that stops the Ozone
// thread when the expected cycle count has elapsed. This design's own choices:
// the down-counter, the 32-bit width (the longest workload, RSA, needs more than
// 9.5M cycles, i.e. at least 24 bits) and the exact cycle at which expire rises.
module ozone_wdt #(
  parameter int unsigned CYC_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [CYC_W-1:0] load_value,
  input  logic             stop,
  output logic             running,
  output logic             expire,
  output logic [CYC_W-1:0] remaining
);

  logic [CYC_W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      cnt     <= '0;
    end else if (start) begin
      running <= 1'b1;
      cnt     <= load_value;
    end else if (stop || expire) begin
      running <= 1'b0;
      cnt     <= '0;
    end else if (running) begin
      cnt <= cnt - 1'b1;
    end
  end

  assign expire    = running && (cnt <= CYC_W'(1));
  assign remaining = running ? cnt : '0;

endmodule
