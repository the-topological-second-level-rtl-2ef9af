// sync_fifo -- single-clock first-in first-out buffer of any element type.
//
// Used twice in the L2 trigger: as the event data pipeline (drawer-pair map
// words of up to DEPTH/64 events) and as the trigger-info FIFO that holds, per
// L1 event, the stereo flag from the central trigger with a snapshot of the
// slow-control parameters. Both keep events in L1 order, which is what lets the
// trigger answer the front end in the order its events occurred.
//
// The depth may be any number; pointers wrap at DEPTH. A write when full is
// dropped and reported on `overflow` for one cycle. Reads are first-word
// fall-through: rd_data shows the oldest element whenever `empty` is low and
// rd_en pops it. Writing and reading in the same cycle is allowed when the
// FIFO is neither full nor empty.
//
// Interface: wr_en/wr_data, rd_en/rd_data, empty, full, overflow, count; one
// clock, asynchronous active-low reset. Following the published design: a
// 50-event buffer depth and in-order processing. The single generic FIFO for
// both paths and the fall-through read are this design's own choices.
module sync_fifo #(
  parameter type T     = logic [63:0],
  parameter int  DEPTH = 50
) (
  input  logic clk,
  input  logic rst_n,
  input  logic wr_en,
  input  T     wr_data,
  input  logic rd_en,
  output T     rd_data,
  output logic empty,
  output logic full,
  output logic overflow,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T              mem [DEPTH];
  logic [AW-1:0] wp, rp;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  logic do_wr, do_rd;
  assign empty   = (count == 0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= wr_en && full;
      if (do_wr) wp <= inc(wp);
      if (do_rd) rp <= inc(rp);
      if (do_wr && !do_rd)      count <= count + 1'b1;
      else if (do_rd && !do_wr) count <= count - 1'b1;
    end
  end

  // A pop from an empty FIFO is a protocol error of the reader
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));

endmodule
