// tb_matrix_transpose -- transposition of the event matrix into drawer words.
//
// Random 64x64 matrices are written row by row; each output word for drawer d
// must hold, in byte w, rows 16w..16w+7 of column d (map1) and rows
// 16w+8..16w+15 (map2). Exactly 64 words per event, out_last on the 64th,
// first word one cycle after event_done. Random back-pressure on out_ready,
// two events buffered at once, and a third one arriving while both banks are
// full must be dropped with an overflow pulse.
// The byte split of a link is this design's choice; the 64x64 matrix and
// its transposition follow the published description. A watchdog ends a
// hung run.
module tb_matrix_transpose;
  import l2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic row_we = 0, event_done = 0, ready = 1, valid, last, ovf;
  logic [5:0] row_addr = 0;
  logic [63:0] row_data = 0;
  drawer_maps_t od;
  int checks = 0, failures = 0, n_ovf = 0;
  logic [63:0] mats [$][64];

  matrix_transpose dut (.clk, .rst_n, .row_we, .row_addr, .row_data, .event_done,
    .out_valid(valid), .out_ready(ready), .out_data(od), .out_last(last), .overflow(ovf));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(output logic [63:0] m [64]);
    for (int r = 0; r < 64; r++) begin
      m[r] = {$urandom, $urandom};
      @(negedge clk); row_we = 1; row_addr = 6'(r); row_data = m[r];
      if (r == 63) event_done = 1;
    end
    @(negedge clk); row_we = 0; event_done = 0;
  endtask

  // consumer
  int col = 0, nev = 0;
  always @(posedge clk) if (rst_n) begin
    if (ovf) n_ovf++;
    if (valid && ready) begin
      automatic logic [63:0] m [64] = mats[0];
      automatic bit ok = 1;
      for (int w = 0; w < 4; w++)
        for (int b = 0; b < 8; b++) begin
          if (od.map1[8 * w + b] != m[16 * w + b][col]) ok = 0;
          if (od.map2[8 * w + b] != m[16 * w + 8 + b][col]) ok = 0;
        end
      chk(ok, $sformatf("event %0d drawer %0d", nev, col));
      chk(last == (col == 63), "last flag");
      if (col == 63) begin col = 0; nev++; void'(mats.pop_front()); end
      else col++;
    end
  end

  initial begin
    logic [63:0] m [64];
    repeat (2) @(posedge clk);
    rst_n = 1;
    // single event, first word the cycle after event_done
    send(m); mats.push_back(m);
    chk(valid, "valid right after event_done");
    wait (nev == 1);
    // two events back to back with back-pressure, then a third while full
    ready = 0;
    send(m); mats.push_back(m);
    send(m); mats.push_back(m);
    send(m);                            // dropped
    @(posedge clk); #1;
    chk(n_ovf == 1, "third event dropped");
    fork
      repeat (400) @(negedge clk) ready = ($urandom % 3) != 0;
    join_none
    wait (nev == 3);
    repeat (5) @(posedge clk);
    chk(!valid, "no extra words");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
