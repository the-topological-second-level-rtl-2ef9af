// tb_drawer_moments -- moments of random drawer words against direct sums.
//
// Bit 8k+b of a drawer word is at x = 2*(k/2) + b%2, y = 8*(k%2) + b.
//
// Random words (and all-zero/all-one words) are applied, #1 waited, and all
// six moments compared with sums over the set bits. The frame follows the
// published FE and drawer-pair frames. A watchdog ends a hung run.
module tb_drawer_moments;
  import l2_pkg::*;
  dword_t w;
  moments_t s;
  int checks = 0, failures = 0;
  drawer_moments dut (.word(w), .stats(s));
  initial begin
    for (int t = 0; t < 500; t++) begin
      automatic moments_t r = '0;
      w = (t == 0) ? '1 : (t == 1) ? '0 : $urandom & $urandom;
      for (int i = 0; i < 32; i++) if (w[i]) begin
        automatic int k = i / 8, b = i % 8;
        automatic int x = 2 * (k / 2) + b % 2, y = 8 * (k % 2) + b;
        r.m += 1; r.mx += x; r.my += y; r.mxx += x * x; r.myy += y * y; r.mxy += x * y;
      end
      #1;
      checks++;
      if (s != r) begin failures++; $display("FAIL: word %h", w); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
