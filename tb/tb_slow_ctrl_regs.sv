// tb_slow_ctrl_regs -- reset values, writes and read-back of the parameters.
//
// Checks the reset values (xc = yc = 0, tau2 = 1024, delta1 = 3, delta2 = 7),
// then writes random values to each of the 4 addresses and checks the params
// struct and the combinational read-back after each round of four writes. The
// register map and reset values are this design's own; the parameter set
// (target position, threshold, two pixel thresholds) follows the published
// algorithm. A watchdog ends a hung run.
module tb_slow_ctrl_regs;
  import l2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr = 0;
  logic [1:0] addr = 0;
  logic [31:0] wd = 0, rd;
  l2_params_t p;
  int checks = 0, failures = 0;
  slow_ctrl_regs dut (.clk, .rst_n, .wr_en(wr), .addr, .wr_data(wd), .rd_data(rd), .params(p));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic w(int a, int d);
    @(negedge clk); wr = 1; addr = 2'(a); wd = d;
    @(negedge clk); wr = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    chk(p.xc == 0 && p.yc == 0 && p.tau2 == 1024 && p.delta1 == 3 && p.delta2 == 7, "reset values");
    for (int t = 0; t < 20; t++) begin
      automatic int xc = int'($urandom % 4096) - 2048, yc = int'($urandom % 4096) - 2048;
      automatic int tau = $urandom, d1 = $urandom % 256, d2 = $urandom % 256;
      w(0, xc); w(1, yc); w(2, tau); w(3, d1 | (d2 << 8));
      chk(p.xc == 16'(xc) && p.yc == 16'(yc) && p.tau2 == 32'(tau), "coordinates and threshold");
      chk(p.delta1 == 8'(d1) && p.delta2 == 8'(d2), "thresholds");
      addr = 0; #1 chk(rd == 32'(xc), "read xc");
      addr = 1; #1 chk(rd == 32'(yc), "read yc");
      addr = 2; #1 chk(rd == 32'(tau), "read tau2");
      addr = 3; #1 chk(rd == 32'(d1 | (d2 << 8)), "read deltas");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
