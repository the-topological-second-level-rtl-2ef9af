// moment_lut -- byte-addressed table of the moments of one FE board.
//
// An FE board carries 8 pixels, one byte of a map word. Instead of summing
// pixel by pixel, the byte addresses a 256-entry table that returns the six
// statistics m, mx, my, mxx, myy, mxy of the set pixels at once, in the FE
// board's own frame: pixel b sits at x = b & 1, y = b (two columns of four
// pixels on the triangular grid). Callers translate the result to the drawer
// and camera frames (moment_transform).
//
// Table contents, for address a:  m = sum a[b],  mx = sum a[b]*(b&1),
// my = sum a[b]*b,  mxx = sum a[b]*(b&1)^2,  myy = sum a[b]*b^2,
// mxy = sum a[b]*(b&1)*b. The table is written as the function it tabulates;
// synthesis reduces it to an 8-input table (ROM or FPGA LUTs). Combinational.
//
// Interface: addr (one FE byte) in, stats out. Following the published design:
// the byte-addressed table in an FE-board local frame. The pixel placement in
// that frame (b&1, b) is read from the published neighbour drawing; writing
// the table as a function rather than a stored array is this design's own.
module moment_lut
  import l2_pkg::*;
(
  input  logic [7:0] addr,
  output moments_t   stats
);

  // One table entry, written as the sum it tabulates
  function automatic moments_t entry(logic [7:0] a);
    moments_t r = '0;
    for (int b = 0; b < PIX_PER_FE; b++) begin
      if (a[b]) begin
        r.m   += 1;
        r.mx  += STAT_W'(b & 1);
        r.my  += STAT_W'(b);
        r.mxx += STAT_W'(b & 1);
        r.myy += STAT_W'(b * b);
        r.mxy += STAT_W'((b & 1) * b);
      end
    end
    return r;
  endfunction

  assign stats = entry(addr);

endmodule
