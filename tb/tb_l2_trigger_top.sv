// tb_l2_trigger_top -- end-to-end test of the L2 trigger at its default size.
//
// Events are sent over the 64 serial links by the front-end model while the
// central-trigger strobe marks each as stereo or mono. The expected verdict of
// every event comes from the pixel-level reference model with the parameters
// in force when its strobe was given. The mix covers: stereo events (accepted
// unseen), noise-only events (no 3-pixel cluster: rejected), showers near the
// target (accepted), showers far from it (rejected), showers touching the
// camera edge, a link ID error, a slow-control change between events, and a
// burst of strobes queued ahead of their data. Decisions must come back in
// order, each within MAX_LAT cycles of its last link symbol.
// Runs at the top's default parameters. Each mechanism is counted and a
// mechanism that never happens counts as a failure. A watchdog ends a hung
// run. Expected behaviour follows the published algorithm and link format.
`timescale 1ns/1ps
module tb_l2_trigger_top;
  import l2_pkg::*;
  import tb_l2_ref_pkg::*;

  localparam int N_EV    = 24;
  localparam int GAP     = 24;     // 270 ns at 11.25 ns per cycle
  localparam int MAX_LAT = 400;

  logic clk = 0, rst_n = 0;
  always #5.625 clk = ~clk;

  logic [63:0] lines;
  logic ct_valid = 0, ct_stereo = 0, sc_wr_en = 0;
  logic [1:0] sc_addr = 0;
  logic [31:0] sc_wr_data = 0, sc_rd_data;
  logic dec_valid, dec_accept, rx_error, data_overflow, info_overflow, busy;
  dec_reason_t dec_reason;

  l2_trigger_top dut (.*, .lines_i(lines));
  fe_link_tx_model #(.OVS(4)) tx (.clk, .lines);

  int checks = 0, failures = 0, cycle = 0;
  int exp_q [$];
  int sent_at [$];
  int n_dec = 0;
  int seen [4] = '{0, 0, 0, 0};
  int n_rxerr = 0, n_edge = 0, n_param = 0, max_info = 0;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic sc_write(int a, int d);
    @(posedge clk);
    sc_wr_en <= 1; sc_addr <= 2'(a); sc_wr_data <= d;
    @(posedge clk);
    sc_wr_en <= 0;
  endtask

  task automatic strobe(bit stereo);
    @(posedge clk);
    ct_valid <= 1; ct_stereo <= stereo;
    @(posedge clk);
    ct_valid <= 0;
  endtask

  // decision monitor
  always @(posedge clk) begin
    if (rst_n && dut.u_info_fifo.count > max_info) max_info = dut.u_info_fifo.count;
    if (rx_error) n_rxerr++;
    if (dec_valid) begin
      chk(exp_q.size() > 0, "decision without event");
      if (exp_q.size() > 0) begin
        automatic int e = exp_q.pop_front();
        automatic int t = sent_at.pop_front();
        chk(int'(dec_reason) == e, $sformatf("event %0d reason %0d expected %0d", n_dec, dec_reason, e));
        chk(dec_accept == (e == 0 || e == 3), $sformatf("event %0d accept flag", n_dec));
        chk(cycle - t <= MAX_LAT, $sformatf("event %0d latency %0d", n_dec, cycle - t));
        seen[e]++;
      end
      n_dec++;
    end
  end

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    map_t m1, m2, m1q [$], m2q [$];
    int   kind, xc = 0, yc = 0, tau2 = 1024 * 25, d1 = 3, d2 = 7;
    bit   st, stq [$];
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    sc_write(2, tau2);
    @(posedge clk);
    chk(dut.params.tau2 == 32'(tau2) && dut.params.delta1 == 8'd3, "slow control write");
    for (int ev = 0; ev < N_EV; ev++) begin
      automatic int bad = -1;
      kind = ev % 6;
      st = (kind == 0);
      if (ev == 9) begin      // move the target and change the thresholds
        xc = -4 * 32; yc = 20 * 32; d1 = 4; d2 = 9;
        sc_write(0, xc); sc_write(1, yc); sc_write(3, d1 | (d2 << 8));
        n_param++;
      end
      case (kind)
        0: random_event(m1, m2, 12, 6, 16, 64);
        1: random_event(m1, m2, 0, 10, 0, 0);                           // noise only
        2: random_event(m1, m2, 10, 4, 16 + xc / 32, 64 + yc / 32);     // near target
        3: random_event(m1, m2, 10, 4, 16 + xc / 32 + 10, 64 + yc / 32 + 40); // far
        4: begin random_event(m1, m2, 10, 0, 1, 2); n_edge++; end          // camera corner
        5: begin random_event(m1, m2, 14, 3, int'($urandom % 32), int'($urandom % 128)); end
      endcase
      if (ev == 7) bad = 13;
      if (ev >= 18 && ev < 21) begin
        // burst: strobes arrive ahead of their data
        stq.push_back(st); m1q.push_back(m1); m2q.push_back(m2);
        exp_q.push_back(decide(st, m1, m2, d1, d2, xc, yc, tau2));
        strobe(st);
        if (ev == 20) begin
          while (stq.size() > 0) begin
            automatic map_t a = m1q.pop_front(), b = m2q.pop_front();
            void'(stq.pop_front());
            tx.send_event(a, b, GAP);
            sent_at.push_back(cycle);
            repeat (GAP) @(posedge clk);
          end
        end
        continue;
      end
      exp_q.push_back(decide(st, m1, m2, d1, d2, xc, yc, tau2));
      strobe(st);
      tx.send_event(m1, m2, GAP, bad);
      sent_at.push_back(cycle);
      repeat (GAP) @(posedge clk);
    end
    repeat (MAX_LAT + 50) @(posedge clk);
    chk(n_dec == N_EV, $sformatf("%0d decisions for %0d events", n_dec, N_EV));
    chk(exp_q.size() == 0, "all events answered");
    chk(!data_overflow && !info_overflow, "no overflow");
    $display("mechanisms: stereo=%0d no_cluster=%0d cog_far=%0d cog_near=%0d rx_error=%0d edge=%0d param_change=%0d max_info_queue=%0d",
             seen[0], seen[1], seen[2], seen[3], n_rxerr, n_edge, n_param, max_info);
    chk(seen[0] > 0, "stereo accept happened");
    chk(seen[1] > 0, "no-cluster reject happened");
    chk(seen[2] > 0, "cog reject happened");
    chk(seen[3] > 0, "cog accept happened");
    chk(n_rxerr > 0, "link ID error detected");
    chk(n_edge > 0 && n_param > 0, "edge event and parameter change happened");
    chk(max_info >= 3, "strobes queued ahead of data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
