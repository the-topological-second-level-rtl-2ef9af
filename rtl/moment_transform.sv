// moment_transform -- moves a set of moments to another coordinate frame.
//
// Moments are linear in the pixel weights, so the statistics of a group of
// pixels can be computed once in a local frame and then carried to any frame
// related to it by x' = SX*x + tx, y' = y + ty:
//   m'   = m
//   mx'  = SX*mx + tx*m
//   my'  = my + ty*m
//   mxx' = SX^2*mxx + 2*SX*tx*mx + tx^2*m
//   myy' = myy + 2*ty*my + ty^2*m
//   mxy' = SX*mxy + SX*ty*mx + tx*my + tx*ty*m
// This is how FE-board table results become drawer-pair statistics and how
// drawer-pair statistics join the camera frame. SX is an x scale factor for
// frames whose x unit differs; this design uses SX = 1 throughout.
// Purely combinational, STAT_W-bit two's complement arithmetic.
//
// Interface: in (moments_t), tx, ty (signed COORD_W) in; out (moments_t).
// Following the published design: translating local statistics to the drawer
// and camera frames. The closed-form update and SX = 1 are this design's own.
// The m output equals the m input: translation does not change the total
// weight, and it is kept so that a moments_t goes in and out whole.
module moment_transform
  import l2_pkg::*;
#(
  parameter int SX = 1
) (
  input  moments_t                  in,
  input  logic signed [15:0]        tx,
  input  logic signed [15:0]        ty,
  output moments_t                  out
);

  logic signed [STAT_W-1:0] x, y, sx;
  assign x  = STAT_W'(tx);
  assign y  = STAT_W'(ty);
  assign sx = STAT_W'(SX);

  always_comb begin
    out.m   = in.m;
    out.mx  = sx * in.mx + x * in.m;
    out.my  = in.my + y * in.m;
    out.mxx = sx * sx * in.mxx + 2 * sx * x * in.mx + x * x * in.m;
    out.myy = in.myy + 2 * y * in.my + y * y * in.m;
    out.mxy = sx * in.mxy + sx * y * in.mx + x * in.my + x * y * in.m;
  end

endmodule
