// cluster_filter -- denoising and 3-pixel cluster detection for one drawer pair.
//
// Both operations act on the binary map1 of the pixels above the L1 threshold:
//   * Denoising keeps a pixel only if at least one of its six nearest
//     neighbours is also set: den(i) = map1(i) AND (OR of its 6 neighbours).
//     Isolated pixels, the typical night-sky-background hits, disappear.
//   * Cluster detection keeps a pixel only if it belongs to a connected group
//     of at least three set pixels. That is true exactly when the pixel is set
//     and either two of its neighbours are set, or one set neighbour has a
//     further set neighbour. The second case reaches the second neighbours of
//     the pixel, which is why the window extends two steps around the drawer.
// Both are built from AND and OR gates plus a 2-of-6 test, one result bit per
// pixel, all 32 pixels of the drawer pair in parallel.
//
// Neighbour offsets in the skewed pixel frame (x unit = sqrt(3) * y unit):
// (0,+-2) and (+-1,+-1).
//
// Interface: win is the neighbourhood from neighbor_window; den and clu are the
// filtered drawer words (bit numbering as in l2_pkg). Purely combinational.
//
// Following the published design: denoising by removing isolated pixels, and
// a cluster test for groups of at least three pixels that looks as far as the
// second neighbours. The exact logic form (per-pixel gates, 2-of-6 test) is
// this design's own; the original ran these filters in software with tables.
module cluster_filter
  import l2_pkg::*;
(
  input  win_t   win,
  output dword_t den,
  output dword_t clu
);

  localparam int NX [6] = '{0, 0, 1, 1, -1, -1};
  localparam int NY [6] = '{2, -2, 1, -1, 1, -1};

  for (genvar i = 0; i < PIX_PER_DRAWER; i++) begin : g_pix
    localparam int X = pix_x(i);
    localparam int Y = pix_y(i);
    logic [5:0] n;        // first neighbours
    logic [5:0] beyond;   // neighbour j has a set neighbour other than pixel i
    for (genvar j = 0; j < 6; j++) begin : g_n
      logic [5:0] nn;
      assign n[j] = win[win_bit(X + NX[j], Y + NY[j])];
      for (genvar k = 0; k < 6; k++) begin : g_nn
        if (NX[k] == -NX[j] && NY[k] == -NY[j]) begin : g_self
          assign nn[k] = 1'b0;
        end else begin : g_other
          assign nn[k] = win[win_bit(X + NX[j] + NX[k], Y + NY[j] + NY[k])];
        end
      end
      assign beyond[j] = |nn;
    end
    logic two;   // at least two of the six neighbours are set
    always_comb begin
      two = 1'b0;
      for (int a = 0; a < 6; a++)
        for (int b = a + 1; b < 6; b++)
          two |= n[a] & n[b];
    end
    assign den[i] = win[win_bit(X, Y)] & (|n);
    assign clu[i] = win[win_bit(X, Y)] & (two | (|(n & beyond)));
  end

endmodule
