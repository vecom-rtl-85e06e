// vecom_encoder: VECOM weight encoding of one signed 8-bit weight.
//
// Step 1, bias control: the weight is stored as u = w + 64 instead of the
// conventional w + 128, so the common weights in [-64, 63] get the low MSB
// levels 00 and 01 instead of 01 and 10.  A biased value below zero (w < -64)
// cannot be stored and is clipped to zero, which stores w as -64.
// Step 2, redundant mapping: the [5:4] slice v of u is split into an Origin
// cell o in {0,1} and a Redun cell r in {0,1,2} with v = 3*o + r: a 11
// becomes Origin 01 / Redun 00, a 01 or 10 moves to the Redun cell and the
// Origin cell holds 00.  The [7:6], [3:2] and [1:0] slices of u are stored
// as they are.
//
// Interface: w (signed 8 bit) in, levels (five 2-bit MLC levels) and clipped
// out.  Purely combinational.
//
// The bias of 64, the clip to zero and the split of [5:4] into Origin/Redun
// (Origin x3) follow the paper.  The paper does not say which 01/10 patterns
// go to the Redun array ("a minor portion"); here every 01 and 10 goes there,
// which is the only split that leaves Origin with just 00 and 01.
module vecom_encoder
  import vecom_pkg::*;
(
  input  logic signed [WEIGHT_BITS-1:0] w,
  output vecom_levels_t                 levels,
  output logic                          clipped
);

  logic signed [WEIGHT_BITS:0] biased;   // w + 64, range -64 .. 191
  logic        [WEIGHT_BITS-1:0] u;      // stored (clipped) biased weight

  always_comb begin
    biased  = (WEIGHT_BITS+1)'(w) + (WEIGHT_BITS+1)'(VECOM_BIAS);
    clipped = biased[WEIGHT_BITS];                 // negative after biasing
    u       = clipped ? '0 : biased[WEIGHT_BITS-1:0];

    levels.msb = u[7:6];
    levels.b32 = u[3:2];
    levels.b10 = u[1:0];
    // Redundant mapping of [5:4]: v = 3*orig + redun
    if (u[5:4] == 2'b11) begin
      levels.orig  = 2'b01;
      levels.redun = 2'b00;
    end else begin
      levels.orig  = 2'b00;
      levels.redun = u[5:4];
    end
  end

endmodule
