// tb_neighbor_window -- window extraction against camera coordinates.
//
// For random camera maps and every drawer pair, each window bit must equal the
// camera pixel at the drawer origin plus the window offset, zero where no pixel
// exists or the position lies outside the camera. Also counts, on an all-ones
// map, the pixels of an interior window beyond the drawer itself: 58 = 26 + 32
// first and second neighbours plus the positions only reachable diagonally.
// Combinational; the 26 + 32 neighbour count follows the published
// description, the slot layout is this design's. A watchdog ends a hung run.
module tb_neighbor_window;
  import l2_pkg::*;
  import tb_l2_ref_pkg::*;

  dword_t map [N_DRAWERS];
  logic [5:0] drawer;
  win_t win;
  int checks = 0, failures = 0;

  neighbor_window dut (.map, .drawer, .win);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    map_t m;
    for (int t = 0; t < 6; t++) begin
      foreach (m[i]) m[i] = (t == 5) ? '1 : $urandom;
      foreach (m[i]) map[i] = m[i];
      for (int d = 0; d < 64; d++) begin
        automatic int bad = 0, gx0 = 4 * (d % 8), gy0 = 16 * (d / 8);
        drawer = 6'(d);
        #1;
        for (int y = WIN_Y0; y < WIN_Y0 + WIN_H; y++)
          for (int x = WIN_X0; x < WIN_X0 + WIN_W; x++)
            if (win[(y - WIN_Y0) * WIN_W + (x - WIN_X0)] != get(m, gx0 + x, gy0 + y)) bad++;
        chk(bad == 0, $sformatf("map %0d drawer %0d: %0d wrong bits", t, d, bad));
      end
    end
    // interior drawer 27 on an all-ones map: 32 own pixels, 96 in the window
    drawer = 6'd27;
    #1;
    chk($countones(win) == 96, $sformatf("window pixel count %0d", $countones(win)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
