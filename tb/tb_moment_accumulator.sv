// tb_moment_accumulator -- camera-wide weighted moments against the reference.
//
// Random map1_hat and map2 camera maps are presented one drawer per clock;
// after `finish` the result must equal delta1 * moments(map1_hat) +
// (delta2 - delta1) * moments(map2) in camera coordinates, one cycle later.
// Drawers are presented in random order, with idle cycles in between.
// The delta weighting follows the published combined map; the one-cycle
// result latency is this design's. A watchdog ends a hung run.
module tb_moment_accumulator;
  import l2_pkg::*;
  import tb_l2_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, acc_en = 0, finish = 0, rv;
  logic [5:0] drawer = 0;
  dword_t hat1 = 0, map2 = 0;
  logic [7:0] d1 = 0, d2 = 0;
  moments_t res;
  int checks = 0, failures = 0;

  moment_accumulator dut (.clk, .rst_n, .clear, .acc_en, .drawer, .hat1, .map2, .finish,
    .delta1(d1), .delta2(d2), .result(res), .result_valid(rv));

  initial begin
    map_t a, b;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      automatic ref_mom_t r;
      automatic int order [64];
      foreach (a[i]) begin
        a[i] = (t == 0) ? '1 : $urandom & $urandom;
        b[i] = (t == 0) ? '1 : a[i] & $urandom;
      end
      foreach (order[i]) order[i] = i;
      order.shuffle();
      @(negedge clk); clear = 1; d1 = 8'($urandom % 8); d2 = d1 + 8'($urandom % 8);
      @(negedge clk); clear = 0;
      foreach (order[i]) begin
        @(negedge clk);
        acc_en = ($urandom % 4) != 0 || 1;
        drawer = 6'(order[i]); hat1 = a[order[i]]; map2 = b[order[i]];
      end
      @(negedge clk); acc_en = 0; finish = 1;
      @(negedge clk); finish = 0;
      r = add(moments(a, d1), moments(b, d2 - d1));
      checks++;
      if (!rv || res.m != r.m || res.mx != r.mx || res.my != r.my || res.mxx != r.mxx ||
          res.myy != r.myy || res.mxy != r.mxy) begin
        failures++;
        $display("FAIL: test %0d m %0d/%0d mx %0d/%0d my %0d/%0d mxx %0d/%0d myy %0d/%0d mxy %0d/%0d",
                 t, res.m, r.m, res.mx, r.mx, res.my, r.my, res.mxx, r.mxx, res.myy, r.myy, res.mxy, r.mxy);
      end
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
