// tb_fe_link_deser -- receiver test with the front-end link model.
//
// Sends random events and checks that every row of the 64x64 matrix is written
// with the symbol values sent (row 16w + bit: bit b of word w on every link),
// that event_done comes once per event right after the last symbol, and that a
// corrupted ID on one link is flagged. Event duration is checked against the
// protocol: 4 words x 19 symbols x OVS cycles plus 3 gaps.
// Symbol timing, OVS = 4 and the gap length are this design's choices; the
// word format follows the published description. A watchdog ends a hung run.
`timescale 1ns/1ps
module tb_fe_link_deser;
  import l2_pkg::*;
  import tb_l2_ref_pkg::*;

  localparam int OVS = 4, GAP = 24;
  logic clk = 0, rst_n = 0;
  always #5.625 clk = ~clk;

  logic [63:0] lines;
  logic row_we, event_done, event_err, id_error;
  logic [5:0] row_addr;
  logic [63:0] row_data;
  logic [63:0] got [64];
  int checks = 0, failures = 0, cycle = 0, n_done = 0, n_iderr = 0, done_cycle = 0;

  fe_link_deser #(.OVS(OVS)) dut (.clk, .rst_n, .lines_i(lines), .row_we, .row_addr,
                                  .row_data, .event_done, .event_err, .id_error);
  fe_link_tx_model #(.OVS(OVS)) tx (.clk, .lines);

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (row_we) got[row_addr] <= row_data;
    if (event_done) begin n_done++; done_cycle = cycle; end
    if (id_error) n_iderr++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    map_t m1, m2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    for (int ev = 0; ev < 6; ev++) begin
      automatic int t0, bad = (ev == 4) ? 17 : -1, errs0 = n_iderr;
      foreach (m1[i]) begin m1[i] = $urandom; m2[i] = $urandom; end
      t0 = cycle;
      tx.send_event(m1, m2, GAP, bad);
      repeat (GAP) @(posedge clk);
      chk(n_done == ev + 1, $sformatf("event %0d done count %0d", ev, n_done));
      // last data symbol ends 3*GAP + 4*19*OVS cycles after the start
      chk(done_cycle - t0 >= 4 * 19 * OVS + 3 * GAP - OVS &&
          done_cycle - t0 <= 4 * 19 * OVS + 3 * GAP + 4,
          $sformatf("event %0d took %0d cycles", ev, done_cycle - t0));
      for (int w = 0; w < 4; w++)
        for (int b = 0; b < 16; b++)
          for (int l = 0; l < 64; l++) begin
            automatic bit exp = (b < 8) ? m1[l][8 * w + b] : m2[l][8 * w + b - 8];
            if (got[16 * w + b][l] != exp) begin
              chk(0, $sformatf("event %0d row %0d link %0d got %h m1 %h m2 %h", ev, 16 * w + b, l, got[16 * w + b], m1[l], m2[l]));
              break;
            end
          end
      checks++;
      chk((n_iderr > errs0) == (bad >= 0), $sformatf("event %0d id error flag", ev));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
