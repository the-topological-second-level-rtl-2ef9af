// fe_link_deser -- receiver for the 64 serial links from the front-end boards.
//
// After an L1 trigger every drawer pair sends its 64 map bits (32 pixels, two
// thresholds) on its own link as 4 words. Each word is a start bit, two ID bits
// and 16 data bits; symbols last 45 ns and words are separated by a gap of at
// least 270 ns, so an event takes about 4.2 us to arrive.
//
// The 64 lines are treated as one bus with a common symbol timing: a word
// starts when any line goes high, the start bit is confirmed at its middle and
// every following symbol is sampled at its middle, OVS clock cycles apart. Each
// data symbol sampled on all 64 lines forms one 64-bit row of the 64x64 event
// matrix, written at row = 16*word + bit. After the last bit the receiver waits
// for all lines to return low (the inter-word gap) before looking for the next
// start bit. The word index is taken from the ID bits of link 0; a word whose
// ID bits differ between links, or that is not the expected next word, is
// flagged. event_done pulses together with the write of the last row of word 3.
//
// The protocol (start bit, 2 ID bits, 16 data bits, 4 words) follows the
// published description. The idle level (low), the shared timing across
// links, 4 samples per symbol, MSB-first bit order and the use of the ID bits
// as the word index are this design's choices.
//
// Interface: lines_i are the single-ended link signals (asynchronous, two-flop
// synchronised here). row_we/row_addr/row_data write the event matrix.
// Latency: a row is written OVS/2 + 3 cycles after the middle of its symbol.
module fe_link_deser
  import l2_pkg::*;
#(
  parameter int N_LINKS   = l2_pkg::N_LINKS,
  parameter int OVS       = 4,                   // clock cycles per symbol
  parameter int WORDS     = l2_pkg::WORDS_PER_LINK,
  parameter int WORD_BITS = l2_pkg::WORD_BITS
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [N_LINKS-1:0]               lines_i,
  output logic                             row_we,
  output logic [$clog2(WORDS*WORD_BITS)-1:0] row_addr,
  output logic [N_LINKS-1:0]               row_data,
  output logic                             event_done,
  output logic                             event_err,   // valid with event_done
  output logic                             id_error     // pulse per bad word
);

  localparam int NBITS = ID_BITS + WORD_BITS;   // symbols after the start bit
  localparam int CW    = $clog2(OVS + 1);
  localparam int BW    = $clog2(NBITS + 1);
  localparam int WW    = $clog2(WORDS);

  typedef enum logic [1:0] {S_IDLE, S_START, S_BITS, S_GAP} state_t;

  logic [N_LINKS-1:0] sync1, sync2;
  state_t             state;
  logic [CW-1:0]      cnt;
  logic [BW-1:0]      bitno;
  logic [ID_BITS-1:0] id_shift [N_LINKS];
  logic [WW-1:0]      word_idx, expect_word;
  logic               err_acc;

  // ID of every link, combinational view once both ID bits are in
  logic               ids_agree;
  always_comb begin
    ids_agree = 1'b1;
    for (int l = 1; l < N_LINKS; l++)
      if (id_shift[l] != id_shift[0]) ids_agree = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync1 <= '0;
      sync2 <= '0;
    end else begin
      sync1 <= lines_i;
      sync2 <= sync1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cnt         <= '0;
      bitno       <= '0;
      word_idx    <= '0;
      expect_word <= '0;
      err_acc     <= 1'b0;
      row_we      <= 1'b0;
      row_addr    <= '0;
      row_data    <= '0;
      event_done  <= 1'b0;
      event_err   <= 1'b0;
      id_error    <= 1'b0;
      for (int l = 0; l < N_LINKS; l++) id_shift[l] <= '0;
    end else begin
      row_we     <= 1'b0;
      event_done <= 1'b0;
      id_error   <= 1'b0;
      unique case (state)
        S_IDLE: if (|sync2) begin
          state <= S_START;
          cnt   <= CW'(OVS / 2 - 1);
        end
        S_START: begin
          if (cnt != 0) cnt <= cnt - 1'b1;
          else if (|sync2) begin           // start bit confirmed at its middle
            state <= S_BITS;
            cnt   <= CW'(OVS - 1);
            bitno <= '0;
          end else state <= S_IDLE;        // glitch
        end
        S_BITS: begin
          if (cnt != 0) cnt <= cnt - 1'b1;
          else begin
            cnt <= CW'(OVS - 1);
            if (bitno < BW'(ID_BITS)) begin
              for (int l = 0; l < N_LINKS; l++)
                id_shift[l] <= {id_shift[l][ID_BITS-2:0], sync2[l]};
            end else begin
              if (bitno == BW'(ID_BITS)) begin
                // both ID bits are in: check them once per word
                word_idx <= WW'(id_shift[0]);
                if (!ids_agree || WW'(id_shift[0]) != expect_word) begin
                  id_error <= 1'b1;
                  err_acc  <= 1'b1;
                end
              end
              row_we   <= 1'b1;
              row_addr <= {(bitno == BW'(ID_BITS)) ? WW'(id_shift[0]) : word_idx,
                           $clog2(WORD_BITS)'(WORD_BITS - 1 - (int'(bitno) - ID_BITS))};
              row_data <= sync2;
            end
            if (bitno == BW'(NBITS - 1)) begin
              state <= S_GAP;
              if (word_idx == WW'(WORDS - 1)) begin
                event_done  <= 1'b1;
                event_err   <= err_acc;
                err_acc     <= 1'b0;
                expect_word <= '0;
              end else begin
                expect_word <= word_idx + 1'b1;
              end
            end
            bitno <= bitno + 1'b1;
          end
        end
        S_GAP: if (!(|sync2)) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
