// moment_accumulator -- camera-wide moments of the weighted combined map.
//
// The decision uses the moments of the combined map
//     c(i) = delta1 * map1_hat(i) + (delta2 - delta1) * map2(i),
// where map1_hat is the denoised map1. Because moments are linear in the
// weights, the two binary maps are summed separately and only combined at the
// end. For every drawer pair presented (one per clock on acc_en) this block
// computes the drawer-frame moments of its map1_hat and map2 words, moves them
// to the camera frame (translation to the drawer pair's slot origin, see
// l2_pkg) and adds them to two accumulators. On `finish` the two sums are
// weighted and added into STAT_W-bit statistics, valid on `result_valid` the
// next cycle. `clear` starts a new event.
//
// Hierarchy, table, frames and the final weighting follow the published
// method; the per-clock pipeline is this design's. A software version skips
// all-zero bytes to save time; in hardware they simply add zero.
module moment_accumulator
  import l2_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic                         acc_en,
  input  logic [$clog2(N_DRAWERS)-1:0] drawer,
  input  dword_t                       hat1,
  input  dword_t                       map2,
  input  logic                         finish,
  input  logic [DELTA_W-1:0]           delta1,
  input  logic [DELTA_W-1:0]           delta2,
  output moments_t                     result,
  output logic                         result_valid
);

  moments_t d1, d2, g1, g2, acc1, acc2;
  logic signed [15:0] tx, ty;

  assign tx = 16'(drawer_x0(int'(drawer)));
  assign ty = 16'(drawer_y0(int'(drawer)));

  drawer_moments u_dm1 (.word(hat1), .stats(d1));
  drawer_moments u_dm2 (.word(map2), .stats(d2));
  moment_transform u_g1 (.in(d1), .tx(tx), .ty(ty), .out(g1));
  moment_transform u_g2 (.in(d2), .tx(tx), .ty(ty), .out(g2));

  function automatic moments_t add(moments_t a, moments_t b);
    add.m   = a.m   + b.m;
    add.mx  = a.mx  + b.mx;
    add.my  = a.my  + b.my;
    add.mxx = a.mxx + b.mxx;
    add.myy = a.myy + b.myy;
    add.mxy = a.mxy + b.mxy;
  endfunction

  function automatic moments_t scale(moments_t a, logic signed [STAT_W-1:0] w);
    scale.m   = w * a.m;
    scale.mx  = w * a.mx;
    scale.my  = w * a.my;
    scale.mxx = w * a.mxx;
    scale.myy = w * a.myy;
    scale.mxy = w * a.mxy;
  endfunction

  logic signed [STAT_W-1:0] w1, w2;
  assign w1 = STAT_W'(delta1);
  assign w2 = STAT_W'(delta2) - STAT_W'(delta1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc1         <= '0;
      acc2         <= '0;
      result       <= '0;
      result_valid <= 1'b0;
    end else begin
      result_valid <= 1'b0;
      if (clear) begin
        acc1 <= '0;
        acc2 <= '0;
      end else if (acc_en) begin
        acc1 <= add(acc1, g1);
        acc2 <= add(acc2, g2);
      end
      if (finish) begin
        result       <= add(scale(acc1, w1), scale(acc2, w2));
        result_valid <= 1'b1;
      end
    end
  end

endmodule
