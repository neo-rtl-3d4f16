// intersection_test_unit (ITU): tests whether a projected Gaussian overlaps one
// subtile and accumulates the result for the Gaussian's valid bit.
//
// The Gaussian's footprint is taken as the square of half-width `radius`
// pixels around the integer part of its 2D mean (the same screen-space bound
// the preprocessing uses to pick tiles); it is tested against the SUBTILE x
// SUBTILE pixel square whose top-left pixel is (sub_x, sub_y). A Gaussian with
// radius 0 (culled) hits nothing. acc_out = acc_in | hit is the cumulative OR
// the paper uses to find outgoing Gaussians: chained over all subtiles of the
// tile, a 0 means the Gaussian no longer touches the tile and its valid bit is
// cleared for the next frame's merge. Purely combinational.
// The paper gives the unit's role (on-the-fly subtile bitmaps plus the
// cumulative OR); the square footprint test is this design's choice.
module intersection_test_unit
  import neo_pkg::*;
#(
  parameter int SUBTILE = 8
) (
  input  feat2d_t     feat,
  input  logic [15:0] sub_x,
  input  logic [15:0] sub_y,
  input  logic        acc_in,
  output logic        hit,
  output logic        acc_out
);
  logic signed [17:0] cx, cy, r, x0, y0;
  always_comb begin
    cx = 18'(feat.mx >>> 16);
    cy = 18'(feat.my >>> 16);
    r  = 18'(feat.radius);
    x0 = 18'(sub_x);
    y0 = 18'(sub_y);
    hit = (feat.radius != 0) &&
          (cx + r >= x0) && (cx - r <= x0 + 18'(SUBTILE - 1)) &&
          (cy + r >= y0) && (cy - r <= y0 + 18'(SUBTILE - 1));
    acc_out = acc_in | hit;
  end
endmodule
