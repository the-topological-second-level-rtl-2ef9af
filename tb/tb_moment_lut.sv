// tb_moment_lut -- all 256 table entries against pixel-by-pixel sums.
//
// Pixel b of an FE board sits at x = b % 2, y = b (two staggered columns).
//
// Every address 0..255 is applied, #1 waited, and the six outputs compared
// with sums over the set bits. The local frame follows the published
// neighbour drawing. A watchdog ends a hung run.
module tb_moment_lut;
  import l2_pkg::*;
  logic [7:0] addr;
  moments_t s;
  int checks = 0, failures = 0;
  moment_lut dut (.addr, .stats(s));
  initial begin
    for (int a = 0; a < 256; a++) begin
      automatic int m = 0, mx = 0, my = 0, mxx = 0, myy = 0, mxy = 0;
      for (int b = 0; b < 8; b++) if (a[b]) begin
        automatic int x = b % 2, y = b;
        m++; mx += x; my += y; mxx += x * x; myy += y * y; mxy += x * y;
      end
      addr = 8'(a);
      #1;
      checks++;
      if (s.m != m || s.mx != mx || s.my != my || s.mxx != mxx || s.myy != myy || s.mxy != mxy) begin
        failures++;
        $display("FAIL: addr %0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
