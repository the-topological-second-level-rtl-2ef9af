// tb_moment_transform -- frame change of moments against direct sums.
//
// Random pixel sets are summed in a local frame and, directly, in frames moved
// by random (tx, ty) with x scale 1 and 2; the transformed local moments must
// equal the direct sums.
// Combinational; #1 after each input change. The translation idea follows
// the published hierarchical computation. A watchdog ends a hung run.
module tb_moment_transform;
  import l2_pkg::*;
  moments_t in, out1, out2;
  logic signed [15:0] tx, ty;
  int checks = 0, failures = 0;
  moment_transform dut1 (.in, .tx, .ty, .out(out1));
  moment_transform #(.SX(2)) dut2 (.in, .tx, .ty, .out(out2));

  function automatic moments_t sums(int xs [$], int ys [$], int s, int dx, int dy);
    moments_t r = '0;
    foreach (xs[i]) begin
      automatic int x = s * xs[i] + dx, y = ys[i] + dy;
      r.m += 1; r.mx += x; r.my += y; r.mxx += x * x; r.myy += y * y; r.mxy += x * y;
    end
    return r;
  endfunction

  initial begin
    for (int t = 0; t < 300; t++) begin
      int xs [$], ys [$];
      automatic int n = $urandom % 20, dx = int'($urandom % 200) - 100, dy = int'($urandom % 200) - 100;
      for (int i = 0; i < n; i++) begin
        xs.push_back($urandom % 8); ys.push_back($urandom % 16);
      end
      in = sums(xs, ys, 1, 0, 0);
      tx = 16'(dx); ty = 16'(dy);
      #1;
      checks += 2;
      if (out1 != sums(xs, ys, 1, dx, dy)) begin failures++; $display("FAIL: test %0d scale 1", t); end
      if (out2 != sums(xs, ys, 2, dx, dy)) begin failures++; $display("FAIL: test %0d scale 2", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
