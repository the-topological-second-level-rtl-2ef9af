// tb_l2_workloads -- the trigger under its heaviest and its typical load.
//
// Two runs through the full design at its default size (64 links, 50-event
// FIFOs, 4 samples per symbol), with events sent back to back: each new event
// starts one minimum word gap (24 cycles, 270 ns) after the previous one ends,
// 426 cycles or 4.8 us apart, which is more than twice the 100 kHz
// maximum L1 rate of the front end.
//   * Worst case: every event monoscopic with every pixel above both
//     thresholds (all 2048 pixels set in map1 and map2) and delta2 = 255, the
//     slowest case for a software implementation and the largest moments
//     (myy = 255 * 2,732,032, still inside 32 bits).
//   * Typical case: monoscopic events with a small shower of a few pixels
//     plus some isolated noise pixels, as a low L1 threshold gives.
// For both, every decision must equal the reference model and come out in
// order, no event or info entry may be dropped, the info FIFO must never hold
// more than 2 events (the processor keeps up with the links), and each event
// must be answered within 1 + 64 + 64 + 3 + 43 cycles of its last link symbol
// being received (event_done of the receiver). The achieved event rate is
// printed. A watchdog ends a hung run.
//
// A third phase fills the buffers: 53 events with no central-trigger strobe
// (50 in the data FIFO, 2 in the transpose banks, one dropped with
// data_overflow), then 55 strobes at once, which overflow the info FIFO.
//
// The load cases follow the published evaluation (all pixels high; typical
// low-energy events); event counts, spacing and image sizes are this design's
// choices.
`timescale 1ns/1ps
module tb_l2_workloads;
  import l2_pkg::*;
  import tb_l2_ref_pkg::*;

  localparam int N_EV     = 12;    // events per run
  localparam int GAP      = 24;    // 270 ns at 11.25 ns per cycle
  localparam int PROC_MAX = 1 + 64 + 64 + 3 + 43;

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
  int n_dec = 0, max_info = 0, n_ovf = 0;
  int done_q [$];
  int max_busy = 0;
  bit free_run = 0;          // phase 3: decisions no longer paired with events
  int n_dovf = 0, n_iovf = 0;

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

  // decisions, queue depth and processing time of each event
  always @(posedge clk) begin
    if (rst_n) begin
      if (int'(dut.u_info_fifo.count) > max_info) max_info = int'(dut.u_info_fifo.count);
      if (data_overflow || info_overflow) n_ovf++;
      if (data_overflow) n_dovf++;
      if (info_overflow) n_iovf++;
      if (dut.event_done) done_q.push_back(cycle);
      if (dec_valid && !free_run) begin
        if (done_q.size() > 0) begin
          automatic int t = done_q.pop_front();
          if (cycle - t > max_busy) max_busy = cycle - t;
        end
        chk(exp_q.size() > 0, "decision without event");
        if (exp_q.size() > 0) begin
          automatic int e = exp_q.pop_front();
          chk(int'(dec_reason) == e, $sformatf("event %0d reason %0d expected %0d", n_dec, dec_reason, e));
          chk(dec_accept == (e == 0 || e == 3), $sformatf("event %0d accept flag", n_dec));
        end
        n_dec++;
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one run of N_EV monoscopic events, sent back to back
  task automatic run(bit worst, int d1, int d2, int tau2, string name);
    map_t m1, m2;
    int t0, t1, n0 = n_dec;
    max_info = 0; max_busy = 0; n_ovf = 0;
    sc_write(2, tau2);
    sc_write(3, d1 | (d2 << 8));
    t0 = cycle;
    for (int ev = 0; ev < N_EV; ev++) begin
      if (worst) begin
        for (int d = 0; d < N_DRAWERS; d++) begin
          m1[d] = '1;
          m2[d] = '1;
        end
      end else begin
        random_event(m1, m2, 3 + int'($urandom % 6), int'($urandom % 8),
                     4 + int'($urandom % 24), 8 + int'($urandom % 112));
      end
      exp_q.push_back(decide(1'b0, m1, m2, d1, d2, 0, 0, tau2));
      strobe(1'b0);
      tx.send_event(m1, m2, GAP);
      repeat (GAP) @(posedge clk);
    end
    t1 = cycle;
    repeat (PROC_MAX + 100) @(posedge clk);
    chk(n_dec - n0 == N_EV, $sformatf("%s: %0d decisions for %0d events", name, n_dec - n0, N_EV));
    chk(exp_q.size() == 0, {name, ": all events answered"});
    chk(n_ovf == 0, {name, ": nothing dropped"});
    chk(max_info <= 2, $sformatf("%s: info queue reached %0d events", name, max_info));
    chk(max_busy <= PROC_MAX, $sformatf("%s: processing took %0d cycles", name, max_busy));
    $display("%s: %0d events in %0d cycles (%0d ns each, %0d kHz), longest reception-to-decision %0d cycles, info queue max %0d",
             name, N_EV, t1 - t0, (t1 - t0) * 1125 / (100 * N_EV),
             (1000000 * N_EV) / ((t1 - t0) * 1125 / 100), max_busy, max_info);
    chk((t1 - t0) * 1125 / 100 <= N_EV * 10000, {name, ": sustains at least 100 kHz"});
  endtask

  // Phase 3: the buffers' limits. With no central-trigger strobes the processor
  // waits, so the data FIFO fills with FIFO_EVENTS events, the two transpose
  // banks take two more, and the next event must be dropped (data_overflow).
  // Then a burst of strobes must overflow the 50-entry info FIFO.
  task automatic overflow_phase();
    map_t m1, m2;
    free_run = 1;
    for (int ev = 0; ev < 50 + 3; ev++) begin
      random_event(m1, m2, 5, 2, 16, 64);
      tx.send_event(m1, m2, GAP);
      repeat (GAP) @(posedge clk);
    end
    repeat (200) @(posedge clk);
    chk(n_dovf == 1, $sformatf("overflow: %0d data drops for 53 events into 52 places", n_dovf));
    chk(int'(dut.d_count) == 50 * N_DRAWERS, "overflow: data FIFO holds 50 events");
    for (int k = 0; k < 55; k++) strobe(1'b1);
    repeat (20) @(posedge clk);
    chk(n_iovf > 0, $sformatf("overflow: %0d info drops after 55 strobes", n_iovf));
    $display("overflow: data drops %0d, info drops %0d", n_dovf, n_iovf);
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    run(1'b1, 3, 255, 1024 * 4, "worst case");
    run(1'b0, 3, 7, 1024 * 400, "typical");
    overflow_phase();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
