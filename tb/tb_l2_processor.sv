// tb_l2_processor -- decision sequencer fed from modelled FIFOs.
//
// Trigger-info entries and drawer words come from queues that behave like the
// first-word-fall-through FIFOs of the design; the data queue sometimes runs
// dry mid-event. Every decision must match the reference model, arrive in
// order, and a monoscopic event whose data is all present must be answered in
// at most 1 + 64 + 64 + 3 + 43 cycles, a stereo one in at most 66.
// The decision rule follows the published algorithm; FIFO behaviour and
// the cycle bounds are this design's. A watchdog ends a hung run.
module tb_l2_processor;
  import l2_pkg::*;
  import tb_l2_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  trig_info_t   info_q [$];
  drawer_maps_t data_q [$];
  trig_info_t   info;
  drawer_maps_t data;
  logic info_rd, data_rd, dec_valid, dec_accept, busy, starve = 0;
  dec_reason_t reason;
  int exp_q [$];
  int checks = 0, failures = 0, n = 0, t_start = 0, cyc = 0, seen [4] = '{0, 0, 0, 0};

  logic info_empty = 1, data_empty = 1;
  // FIFO outputs refreshed between clock edges
  always @(negedge clk) begin
    info_empty = info_q.size() == 0;
    data_empty = data_q.size() == 0 || starve;
    info = info_empty ? '0 : info_q[0];
    data = (data_q.size() == 0) ? '0 : data_q[0];
  end

  l2_processor dut (.clk, .rst_n,
    .info_empty, .info, .info_rd,
    .data_empty, .data, .data_rd,
    .dec_valid, .dec_accept, .dec_reason(reason), .busy);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (info_rd) begin void'(info_q.pop_front()); t_start <= cyc; end
    if (data_rd) void'(data_q.pop_front());
    if (dec_valid) begin
      automatic int e = exp_q.pop_front();
      chk(int'(reason) == e, $sformatf("event %0d reason %0d exp %0d", n, reason, e));
      chk(dec_accept == (e == 0 || e == 3), "accept flag");
      if (!starve_seen) chk(cyc - t_start <= ((e == 0) ? 66 : 1 + 64 + 64 + 3 + 43),
                            $sformatf("event %0d took %0d cycles", n, cyc - t_start));
      seen[e]++;
      n++;
    end
  end
  bit starve_seen = 0;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 30; ev++) begin
      map_t m1, m2;
      automatic trig_info_t ti;
      automatic int k = ev % 5;
      ti.stereo = (k == 0);
      ti.params.xc = 16'(int'($urandom % 512) - 256);
      ti.params.yc = 16'(int'($urandom % 2048) - 1024);
      ti.params.tau2 = 32'(($urandom % 30 + 1) * 1024 * 30);
      ti.params.delta1 = 8'(2 + $urandom % 4);
      ti.params.delta2 = ti.params.delta1 + 8'($urandom % 6);
      case (k)
        1: random_event(m1, m2, 0, 12, 0, 0);
        default: random_event(m1, m2, 12, 5, int'($urandom % 32), int'($urandom % 128));
      endcase
      exp_q.push_back(decide(ti.stereo, m1, m2, ti.params.delta1, ti.params.delta2,
                             longint'(ti.params.xc), longint'(ti.params.yc), longint'(ti.params.tau2)));
      while (busy || info_q.size() != 0) @(posedge clk);
      @(posedge clk); #2;
      starve_seen = (ev % 7 == 6);
      info_q.push_back(ti);
      for (int d = 0; d < 64; d++) data_q.push_back('{map2: m2[d], map1: m1[d]});
      if (starve_seen) begin
        repeat (20) @(negedge clk);
        starve = 1;
        repeat (30) @(negedge clk);
        starve = 0;
      end
      while (n != ev + 1) @(posedge clk);
    end
    repeat (5) @(posedge clk);
    chk(data_q.size() == 0 && info_q.size() == 0, "all input consumed");
    chk(seen[0] > 0 && seen[1] > 0 && seen[2] > 0 && seen[3] > 0,
        $sformatf("all outcomes: %0d %0d %0d %0d", seen[0], seen[1], seen[2], seen[3]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
