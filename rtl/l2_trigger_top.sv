// l2_trigger_top -- second-level (L2) trigger of a large Cherenkov telescope camera.
//
// On every first-level (L1) trigger the camera's front end sends two binary
// images of its 2048 pixels: map1 (pixels above the L1 threshold delta1) and
// map2 (pixels above a higher threshold delta2). The central trigger says
// separately whether another telescope saw the same shower. Stereoscopic events
// are always kept; monoscopic ones are kept only if map1 holds a cluster of at
// least three adjacent pixels and the centre of gravity of the weighted image
// lies close enough to the pointed source. Answers go back in L1 order, since
// the front end holds its events in FIFOs until it hears the verdict.
//
// Datapath:
//   lines_i -> fe_link_deser -> matrix_transpose -> data FIFO ---\
//   ct_valid/ct_stereo + slow-control snapshot -> info FIFO -----> l2_processor -> dec_*
// The data FIFO holds drawer words of up to FIFO_EVENTS events, the info FIFO
// up to FIFO_EVENTS entries; FIFO_EVENTS = 50 matches the event capacity of the
// front-end FIFOs, beyond which the trigger would be too late anyway.
//
// Interface: lines_i are the 64 front-end links after LVDS-to-single-ended
// conversion. ct_valid pulses once per L1 event with ct_stereo. sc_* is the
// slow-control register port (see slow_ctrl_regs). dec_valid pulses once per
// event with dec_accept and dec_reason. The error outputs pulse on a receive
// error (link ID bits) or a dropped event or info word.
// Timing: decisions come about 175 cycles after the last matrix row of a
// monoscopic event (64 for a stereo one), plus any queueing.
//
// Following the published design: the link format, matrix transpose, FIFO
// depth, trigger-info path, filters, hierarchical moments and the cut. This
// design's own: the decision is computed by a hardware state machine rather
// than by embedded-processor software, the clock is 4 samples per 45 ns
// symbol, and the decision and central-trigger ports are single-cycle pulses.
module l2_trigger_top
  import l2_pkg::*;
#(
  parameter int OVS         = 4,
  parameter int FIFO_EVENTS = 50
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_LINKS-1:0] lines_i,
  input  logic               ct_valid,
  input  logic               ct_stereo,
  input  logic               sc_wr_en,
  input  logic [1:0]         sc_addr,
  input  logic [31:0]        sc_wr_data,
  output logic [31:0]        sc_rd_data,
  output logic               dec_valid,
  output logic               dec_accept,
  output dec_reason_t        dec_reason,
  output logic               rx_error,
  output logic               data_overflow,
  output logic               info_overflow,
  output logic               busy
);

  // link reception
  logic                           row_we, event_done, event_err, id_error;
  logic [$clog2(MATRIX_ROWS)-1:0] row_addr;
  logic [N_LINKS-1:0]             row_data;

  fe_link_deser #(.OVS(OVS)) u_deser (
    .clk, .rst_n, .lines_i,
    .row_we, .row_addr, .row_data, .event_done, .event_err, .id_error
  );
  assign rx_error = id_error;

  // transposition into drawer words
  logic         tr_valid, tr_ready, tr_last, tr_overflow;
  drawer_maps_t tr_data;

  matrix_transpose u_tr (
    .clk, .rst_n, .row_we, .row_addr, .row_data, .event_done,
    .out_valid(tr_valid), .out_ready(tr_ready), .out_data(tr_data),
    .out_last(tr_last), .overflow(tr_overflow)
  );

  // event data FIFO
  logic         d_empty, d_full, d_ovf, d_rd;
  drawer_maps_t d_data;
  logic [$clog2(FIFO_EVENTS*N_DRAWERS+1)-1:0] d_count;

  assign tr_ready = !d_full;

  sync_fifo #(.T(drawer_maps_t), .DEPTH(FIFO_EVENTS * N_DRAWERS)) u_data_fifo (
    .clk, .rst_n, .wr_en(tr_valid && tr_ready), .wr_data(tr_data),
    .rd_en(d_rd), .rd_data(d_data), .empty(d_empty), .full(d_full),
    .overflow(d_ovf), .count(d_count)
  );
  assign data_overflow = tr_overflow | d_ovf;

  // slow control and trigger-info FIFO
  l2_params_t params;
  slow_ctrl_regs u_sc (
    .clk, .rst_n, .wr_en(sc_wr_en), .addr(sc_addr), .wr_data(sc_wr_data),
    .rd_data(sc_rd_data), .params
  );

  logic       i_empty, i_full, i_rd;
  trig_info_t i_data, i_wdata;
  logic [$clog2(FIFO_EVENTS+1)-1:0] i_count;
  assign i_wdata = '{stereo: ct_stereo, params: params};

  sync_fifo #(.T(trig_info_t), .DEPTH(FIFO_EVENTS)) u_info_fifo (
    .clk, .rst_n, .wr_en(ct_valid), .wr_data(i_wdata),
    .rd_en(i_rd), .rd_data(i_data), .empty(i_empty), .full(i_full),
    .overflow(info_overflow), .count(i_count)
  );

  // decision
  l2_processor u_proc (
    .clk, .rst_n,
    .info_empty(i_empty), .info(i_data), .info_rd(i_rd),
    .data_empty(d_empty), .data(d_data), .data_rd(d_rd),
    .dec_valid, .dec_accept, .dec_reason, .busy
  );

endmodule
