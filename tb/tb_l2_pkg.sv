// tb_l2_pkg -- geometry helpers of l2_pkg.
//
// pix_x/pix_y and pix_index must be inverse to each other over the 32 pixels
// of a drawer pair, every pixel must sit where x + y is even, FE board k must
// occupy x = 2*(k>>1)..+1, y = 8*(k&1)..+7, and the drawer pair must have 26
// first and 32 second neighbours outside itself. Drawer origins must tile the
// camera without overlap, centred on the origin.
// The neighbour counts come from the published description; the slot
// layout is this design's. No clocked logic; a watchdog ends a hung run.
module tb_l2_pkg;
  import l2_pkg::*;
  int checks = 0, failures = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit inside_drawer(int x, int y);
    return pix_index(x, y) >= 0;
  endfunction

  initial begin
    int n1 = 0, n2 = 0, sx = 0, sy = 0;
    int nx [6] = '{0, 0, 1, 1, -1, -1};
    int ny [6] = '{2, -2, 1, -1, 1, -1};
    int ax [12] = '{0, 0, 1, 1, -1, -1, 2, 2, -2, -2, 2, -2};
    int ay [12] = '{4, -4, 3, -3, 3, -3, 2, -2, 2, -2, 0, 0};
    bit first [int], second [int];
    for (int i = 0; i < 32; i++) begin
      chk(pix_index(pix_x(i), pix_y(i)) == i, $sformatf("pixel %0d round trip", i));
      chk(((pix_x(i) + pix_y(i)) % 2) == 0, $sformatf("pixel %0d parity", i));
      chk(pix_x(i) / 2 == (i / 8) / 2 && pix_y(i) / 8 == (i / 8) % 2, $sformatf("pixel %0d board", i));
    end
    chk(pix_index(1, 0) == -1 && pix_index(4, 0) == -1 && pix_index(0, 16) == -1, "no pixel off grid");
    for (int i = 0; i < 32; i++)
      for (int j = 0; j < 6; j++) begin
        automatic int x = pix_x(i) + nx[j], y = pix_y(i) + ny[j];
        if (!inside_drawer(x, y)) first[x * 1000 + y] = 1;
      end
    for (int i = 0; i < 32; i++)
      for (int j = 0; j < 12; j++) begin
        automatic int x = pix_x(i) + ax[j], y = pix_y(i) + ay[j];
        if (!inside_drawer(x, y) && !first.exists(x * 1000 + y)) second[x * 1000 + y] = 1;
      end
    chk(first.num() == 26, $sformatf("%0d first neighbours", first.num()));
    chk(second.num() == 32, $sformatf("%0d second neighbours", second.num()));
    for (int d = 0; d < N_DRAWERS; d++) begin
      sx += drawer_x0(d); sy += drawer_y0(d);
      for (int e = 0; e < d; e++)
        chk(drawer_x0(d) != drawer_x0(e) || drawer_y0(d) != drawer_y0(e), "distinct origins");
    end
    // origins of an 8x8 grid of 4x16 slots from (-16,-64): mean (-2, -8)
    chk(sx == 64 * -2 && sy == 64 * -8, $sformatf("origin sums %0d %0d", sx, sy));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
