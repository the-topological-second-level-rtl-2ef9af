// neighbor_window -- gathers one drawer pair and its neighbourhood from the map.
//
// The denoising and cluster filters decide on a pixel from its first and
// second neighbours. For the 32 pixels of one drawer pair these are 58 pixels
// (26 first and 32 second neighbours) on the 12 FE boards around it: both
// halves of the drawer pairs to the left and right, the adjacent halves of the
// pairs above and below, and the corner halves diagonally across. This block
// cuts that neighbourhood out of the full camera map as a window of
// WIN_H rows (y = -4..19) by WIN_W columns (x = -2..5) in the drawer pair's
// local frame. Grid positions that carry no pixel, and pixels that would lie
// outside the camera, read as zero, so camera edges need no special case.
//
// Drawer pairs are placed in the slot grid defined in l2_pkg; the neighbour of
// drawer d in slot direction (dc, dr) is drawer d + dc + SLOT_COLS*dr. Each
// window bit is one 64-way multiplexer over the drawer index.
//
// Interface: map holds the 64 drawer words of one map, drawer selects the
// drawer pair, win[win_bit(x, y)] is the pixel at local (x, y).
// Purely combinational.
//
// Following the published design: the 26 first and 32 second neighbours on 12
// FE boards around a drawer pair. The 8 x 8 slot placement of the drawer pairs
// and the window-based form are this design's own choices.
// About half of the window bits sit on grid positions with no pixel and are
// constant zero by construction; they are kept so that win_bit(x, y) is a
// plain row-major index.
module neighbor_window
  import l2_pkg::*;
(
  input  dword_t                       map [N_DRAWERS],
  input  logic [$clog2(N_DRAWERS)-1:0] drawer,
  output win_t                         win
);

  localparam int CW = $clog2(SLOT_COLS);

  logic [CW-1:0] col;
  logic [$clog2(N_DRAWERS)-CW-1:0] row;
  assign col = drawer[CW-1:0];
  assign row = drawer[$clog2(N_DRAWERS)-1:CW];

  for (genvar wy = 0; wy < WIN_H; wy++) begin : g_y
    for (genvar wx = 0; wx < WIN_W; wx++) begin : g_x
      localparam int X  = wx + WIN_X0;
      localparam int Y  = wy + WIN_Y0;
      localparam int DC = (X < 0) ? -1 : (X >= DRAWER_W) ? 1 : 0;
      localparam int DR = (Y < 0) ? -1 : (Y >= DRAWER_H) ? 1 : 0;
      localparam int BI = pix_index(X - DRAWER_W * DC, Y - DRAWER_H * DR);
      if (BI < 0) begin : g_none
        assign win[wy * WIN_W + wx] = 1'b0;
      end else begin : g_pix
        logic in_cam;
        assign in_cam = (int'(col) + DC >= 0) && (int'(col) + DC < SLOT_COLS) &&
                        (int'(row) + DR >= 0) && (int'(row) + DR < SLOT_ROWS);
        assign win[wy * WIN_W + wx] =
          in_cam && map[int'(drawer) + DC + SLOT_COLS * DR][BI];
      end
    end
  end

endmodule
