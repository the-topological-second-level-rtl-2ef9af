// drawer_moments -- moments of the 32 pixels of one drawer-pair word.
//
// Each of the four bytes of a drawer word (one FE board each) addresses a
// moment_lut. The four table outputs are translated to the drawer-pair frame,
// FE board k moving by (2*(k>>1), 8*(k&1)), and added. The result is the
// m, mx, my, mxx, myy, mxy of the set pixels in the drawer-pair frame.
// Purely combinational.
//
// Interface: word in (32 bits, byte k = FE board k), stats out (moments_t).
// Following the published design: a byte-addressed table per FE board and a
// translation of each board's result to the drawer-pair frame. Doing all four
// boards in parallel in one cycle is this design's own choice.
module drawer_moments
  import l2_pkg::*;
(
  input  dword_t   word,
  output moments_t stats
);

  moments_t fe_local [FE_PER_DRAWER];
  moments_t fe_drawer [FE_PER_DRAWER];

  for (genvar k = 0; k < FE_PER_DRAWER; k++) begin : g_fe
    moment_lut u_lut (
      .addr  (word[PIX_PER_FE*k +: PIX_PER_FE]),
      .stats (fe_local[k])
    );
    moment_transform u_move (
      .in  (fe_local[k]),
      .tx  (16'(2 * (k >> 1))),
      .ty  (16'(8 * (k & 1))),
      .out (fe_drawer[k])
    );
  end

  always_comb begin
    stats = '0;
    for (int k = 0; k < FE_PER_DRAWER; k++) begin
      stats.m   += fe_drawer[k].m;
      stats.mx  += fe_drawer[k].mx;
      stats.my  += fe_drawer[k].my;
      stats.mxx += fe_drawer[k].mxx;
      stats.myy += fe_drawer[k].myy;
      stats.mxy += fe_drawer[k].mxy;
    end
  end

endmodule
