// tb_cluster_filter -- denoise and 3-cluster filter against the reference model.
//
// Random camera maps of varying density are filtered by the reference model
// over the whole camera. For each drawer pair the window is built directly
// from the camera map (not by neighbor_window) and the filter's den and clu
// words must equal the reference results at that drawer's pixels. Hand-made
// cases cover an isolated pixel, a pair, a straight and a bent triple.
// Combinational block: inputs are set, #1 waited, outputs compared. The rules
// checked are the published denoise and 3-pixel cluster definitions.
// A watchdog ends the run with a failure if it hangs.
module tb_cluster_filter;
  import l2_pkg::*;
  import tb_l2_ref_pkg::*;

  win_t   win;
  dword_t den, clu;
  int checks = 0, failures = 0;

  cluster_filter dut (.win, .den, .clu);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // window of drawer d cut from the camera map by camera coordinates
  function automatic win_t make_win(const ref map_t m, input int d);
    win_t w = '0;
    int wh = WIN_H, ww = WIN_W;
    int gx0 = 4 * (d % 8), gy0 = 16 * (d / 8);
    for (int y = WIN_Y0; y < WIN_Y0 + wh; y++)
      for (int x = WIN_X0; x < WIN_X0 + ww; x++)
        w[(y - WIN_Y0) * WIN_W + (x - WIN_X0)] = get(m, gx0 + x, gy0 + y);
    return w;
  endfunction

  task automatic check_map(const ref map_t m, input string tag);
    map_t rd, rc;
    denoise(m, rd);
    cluster3(m, rc);
    for (int d = 0; d < GW * 2; d++) begin
      win = make_win(m, d);
      #1;
      chk(den == rd[d], $sformatf("%s drawer %0d den %h exp %h", tag, d, den, rd[d]));
      chk(clu == rc[d], $sformatf("%s drawer %0d clu %h exp %h", tag, d, clu, rc[d]));
    end
  endtask

  initial begin
    map_t m;
    // hand-made: isolated pixel, pair, straight triple, bent triple
    clear(m); put(m, 9, 21, 1);                                     check_map(m, "single");
    clear(m); put(m, 9, 21, 1); put(m, 9, 23, 1);                   check_map(m, "pair");
    clear(m); put(m, 9, 21, 1); put(m, 9, 23, 1); put(m, 9, 25, 1); check_map(m, "line");
    clear(m); put(m, 15, 31, 1); put(m, 16, 32, 1); put(m, 17, 31, 1); check_map(m, "bent");
    for (int t = 0; t < 12; t++) begin
      clear(m);
      for (int k = 0; k < 40 + 60 * t; k++) put(m, $urandom % 32, $urandom % 128, 1);
      check_map(m, $sformatf("random%0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
