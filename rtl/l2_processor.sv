// l2_processor -- event sequencer running the L2 decision algorithm.
//
// For every L1 event, strictly in arrival order, the processor takes one entry
// from the trigger-info FIFO (stereo flag and parameter snapshot) and the
// event's 64 drawer words from the data FIFO, and answers accept or reject:
//   * A stereoscopic event is accepted without further work.
//   * Otherwise, in one pass over the 64 drawer pairs (one per clock), it
//     - finds the pixels of map1 that belong to clusters of at least 3,
//     - denoises map1 (removes isolated pixels) into map1_hat, and
//     - accumulates the moments of map1_hat and map2.
//     No cluster anywhere: reject. Otherwise the moments are weighted with
//     delta1 and delta2 - delta1 and the centre-of-gravity cut decides.
// Computing the moments during the cluster pass gives the same answer as
// computing them after it, since they are discarded when no cluster exists.
//
// The published system runs this sequence as PowerPC software with the
// filters as custom instructions; here it is a state machine. Answers leave
// in L1 order because events are processed one at a time from in-order FIFOs.
//
// Timing per event: 1 cycle to take the info entry, 64 cycles to load the maps
// (more if the data FIFO runs dry), 64 filter cycles, then 1 cycle for a
// stereo or no-cluster answer or about 45 more for the cog cut.
// Interface: FIFO read ports (first-word fall-through) and a decision pulse
// dec_valid with dec_accept and dec_reason.
module l2_processor
  import l2_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  // trigger-info FIFO
  input  logic          info_empty,
  input  trig_info_t    info,
  output logic          info_rd,
  // event data FIFO
  input  logic          data_empty,
  input  drawer_maps_t  data,
  output logic          data_rd,
  // decision to the local trigger management
  output logic          dec_valid,
  output logic          dec_accept,
  output dec_reason_t   dec_reason,
  output logic          busy
);

  localparam int DW = $clog2(N_DRAWERS);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_FILTER, S_FINISH, S_WAITM, S_COG} state_t;

  state_t     state;
  trig_info_t cur;
  dword_t     map1 [N_DRAWERS];
  dword_t     map2 [N_DRAWERS];
  logic [DW:0] idx;
  logic       any_cluster;

  // filter datapath on drawer idx
  win_t       win;
  dword_t     den, clu;
  logic [DW-1:0] didx;
  assign didx = idx[DW-1:0];

  neighbor_window u_win (.map(map1), .drawer(didx), .win(win));
  cluster_filter  u_flt (.win(win), .den(den), .clu(clu));

  // moments
  logic     acc_clear, acc_en, acc_finish, mom_valid;
  moments_t mom;
  moment_accumulator u_acc (
    .clk, .rst_n,
    .clear(acc_clear), .acc_en(acc_en), .drawer(didx),
    .hat1(den), .map2(map2[didx]),
    .finish(acc_finish),
    .delta1(cur.params.delta1), .delta2(cur.params.delta2),
    .result(mom), .result_valid(mom_valid)
  );

  // centre-of-gravity cut
  logic cog_done, cog_accept;
  logic signed [COORD_W-1:0] cog_x, cog_y;
  logic [63:0] dist2;
  cog_cut u_cog (
    .clk, .rst_n, .start(mom_valid), .stats(mom), .params(cur.params),
    .done(cog_done), .accept(cog_accept), .cog_x, .cog_y, .dist2
  );

  assign info_rd    = (state == S_IDLE) && !info_empty;
  assign data_rd    = (state == S_LOAD) && !data_empty;
  assign acc_clear  = (state == S_IDLE);
  assign acc_en     = (state == S_FILTER);
  assign acc_finish = (state == S_FINISH);
  assign busy       = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (data_rd) begin
      map1[didx] <= data.map1;
      map2[didx] <= data.map2;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cur         <= '0;
      idx         <= '0;
      any_cluster <= 1'b0;
      dec_valid   <= 1'b0;
      dec_accept  <= 1'b0;
      dec_reason  <= DEC_STEREO;
    end else begin
      dec_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (!info_empty) begin
          cur   <= info;
          idx   <= '0;
          state <= S_LOAD;
        end
        S_LOAD: if (!data_empty) begin
          if (idx == (DW+1)'(N_DRAWERS - 1)) begin
            idx <= '0;
            any_cluster <= 1'b0;
            if (cur.stereo) begin
              dec_valid  <= 1'b1;
              dec_accept <= 1'b1;
              dec_reason <= DEC_STEREO;
              state      <= S_IDLE;
            end else state <= S_FILTER;
          end else idx <= idx + 1'b1;
        end
        S_FILTER: begin
          if (|clu) any_cluster <= 1'b1;
          if (idx == (DW+1)'(N_DRAWERS - 1)) begin
            if (!(any_cluster || (|clu))) begin
              dec_valid  <= 1'b1;
              dec_accept <= 1'b0;
              dec_reason <= DEC_NO_CLUSTER;
              state      <= S_IDLE;
            end else state <= S_FINISH;
          end
          idx <= idx + 1'b1;
        end
        S_FINISH: state <= S_WAITM;
        S_WAITM:  if (mom_valid) state <= S_COG;
        S_COG: if (cog_done) begin
          dec_valid  <= 1'b1;
          dec_accept <= cog_accept;
          dec_reason <= cog_accept ? DEC_COG_NEAR : DEC_COG_FAR;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
