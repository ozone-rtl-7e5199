// ozone_bpred: the Ozone branch predictor and its isolation from the main one.
//
// Ozone code may only branch on loops with a fixed trip count, so a stateless
// predict-always-taken predictor serves it well and cannot be trained by, or
// leak to, any other thread. In Ozone mode this block predicts every branch
// taken to its decoded target and gates off the core's update requests to the
// main predictor, so Ozone branches neither use nor disturb its state. Outside
// Ozone mode the main predictor's prediction and updates pass unchanged.
// Purely combinational.
//
// Follows the original design: the always-taken, stateless Ozone predictor and
// the rule that the main predictor is off-limits to Ozone threads. This design's
// own choice: doing the isolation by gating the update enable.
module ozone_bpred #(
  parameter int unsigned PC_W = 64
) (
  input  logic            ozone_mode,
  input  logic            br_valid,     // a branch is being predicted
  input  logic [PC_W-1:0] br_target,    // its decoded target
  input  logic            main_taken,   // main predictor's guess
  input  logic [PC_W-1:0] main_target,
  input  logic            main_upd_in,  // core's update request
  output logic            pred_taken,
  output logic [PC_W-1:0] pred_target,
  output logic            main_upd_out  // update reaching the main predictor
);

  always_comb begin
    if (ozone_mode) begin
      pred_taken   = br_valid;
      pred_target  = br_target;
      main_upd_out = 1'b0;
    end else begin
      pred_taken   = main_taken;
      pred_target  = main_target;
      main_upd_out = main_upd_in;
    end
  end

endmodule
