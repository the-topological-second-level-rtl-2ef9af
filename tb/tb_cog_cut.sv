// tb_cog_cut -- centre of gravity, squared distance and decision.
//
// Random first moments (including negative ones, m = 0 and cases right at the
// threshold) are compared with integer arithmetic: cx = trunc(32 mx / m),
// d2 = (cy - yc)^2 + 3 (cx - xc)^2, accept iff m > 0 and d2 < tau2. The result
// must arrive exactly W + 2 = 42 clock edges after the edge that samples start.
// Interface: drives start/stats/params on clk and waits for done. The
// cut formula follows the published algorithm; the latency is this design's.
// A watchdog ends the run with a failure if it hangs.
module tb_cog_cut;
  import l2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, done, acc;
  moments_t st = '0;
  l2_params_t p = '0;
  logic signed [15:0] cx, cy;
  logic [63:0] d2;
  int checks = 0, failures = 0, n_acc = 0, n_rej = 0;

  cog_cut dut (.clk, .rst_n, .start, .stats(st), .params(p), .done, .accept(acc),
               .cog_x(cx), .cog_y(cy), .dist2(d2));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic longint m = (t == 3) ? 0 : 1 + $urandom % 5000;
      automatic longint mx = (longint'($urandom % 40) - 20) * m + longint'($urandom % 200) - 100;
      automatic longint my = (longint'($urandom % 160) - 80) * m + longint'($urandom % 200) - 100;
      automatic longint ex_cx, ex_cy, ex_d2, xc, yc, tau;
      automatic int lat = 0;
      xc = longint'($urandom % 1024) - 512; yc = longint'($urandom % 4096) - 2048;
      ex_cx = (m == 0) ? 0 : (mx * 32) / m;
      ex_cy = (m == 0) ? 0 : (my * 32) / m;
      ex_d2 = (ex_cy - yc) * (ex_cy - yc) + 3 * (ex_cx - xc) * (ex_cx - xc);
      tau = (t % 4 == 0) ? ex_d2 : (t % 4 == 1) ? ex_d2 + 1 : longint'($urandom % 2000000);
      @(negedge clk);
      st.m = 32'(m); st.mx = 32'(mx); st.my = 32'(my);
      p.xc = 16'(xc); p.yc = 16'(yc); p.tau2 = 32'(tau);
      start = 1;
      @(negedge clk); start = 0;
      while (!done) begin @(negedge clk); lat++; end
      chk(lat == 42, $sformatf("latency %0d", lat));
      if (m != 0) begin
        chk(cx == 16'(ex_cx) && cy == 16'(ex_cy), $sformatf("test %0d cog %0d,%0d exp %0d,%0d", t, cx, cy, ex_cx, ex_cy));
        chk(d2 == 64'(ex_d2), $sformatf("test %0d d2 %0d exp %0d", t, d2, ex_d2));
      end
      chk(acc == (m > 0 && ex_d2 < tau), $sformatf("test %0d decision", t));
      if (acc) n_acc++; else n_rej++;
    end
    chk(n_acc > 20 && n_rej > 20, "both outcomes exercised");
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
