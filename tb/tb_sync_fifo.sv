// tb_sync_fifo -- FIFO order, full/empty flags, overflow drop, odd depth wrap.
//
// A depth-5 FIFO of 16-bit words is driven with random pushes and pops against
// a queue model for 2000 cycles; pushes when full must be dropped with an
// overflow pulse, and the default depth of 50 must accept exactly 50 entries.
// The 50-event depth follows the published FE buffer size; the flag
// behaviour is this design's. A watchdog ends a hung run.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_ovf = 0;

  logic wr, rd, empty, full, ovf;
  logic [15:0] wd, rdat;
  logic [2:0] count;
  sync_fifo #(.T(logic [15:0]), .DEPTH(5)) dut (.clk, .rst_n, .wr_en(wr), .wr_data(wd),
    .rd_en(rd), .rd_data(rdat), .empty, .full, .overflow(ovf), .count);

  logic wr50 = 0, e50, f50, o50;
  logic [63:0] r50;
  logic [5:0] c50;
  sync_fifo dut50 (.clk, .rst_n, .wr_en(wr50), .wr_data(64'd0), .rd_en(1'b0),
    .rd_data(r50), .empty(e50), .full(f50), .overflow(o50), .count(c50));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [15:0] q [$];
    wr = 0; rd = 0; wd = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      chk(empty == (q.size() == 0) && full == (q.size() == 5) && count == 3'(q.size()), "flags");
      if (!empty) chk(rdat == q[0], $sformatf("cycle %0d data %h exp %h", c, rdat, q[0]));
      wr = ($urandom % 3) != 0 && (c % 400 < 300);
      rd = !empty && ($urandom % 2 == 0);
      wd = 16'($urandom);
      begin
        automatic int sizeb = q.size();
        @(posedge clk);
        #1;
        if (rd) void'(q.pop_front());
        if (wr && sizeb < 5) q.push_back(wd);
        if (wr && sizeb == 5) chk(ovf, "overflow flagged");
      end
      if (ovf) n_ovf++;
    end
    chk(n_ovf > 0, "overflow exercised");
    @(negedge clk); wr = 0; rd = 0;
    for (int i = 0; i < 52; i++) begin
      @(negedge clk); wr50 = 1;
    end
    @(negedge clk); wr50 = 0;
    chk(c50 == 6'd50 && f50, $sformatf("default depth holds %0d", c50));
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
