// matrix_transpose -- turns the received 64x64 bit matrix into per-drawer words.
//
// The receiver delivers an event as 64 rows of 64 bits: row r holds data bit r
// of every link, so a column is the 64 bits of one drawer pair. The filters and
// the moment computation need the opposite view, the 32 pixels of one drawer
// pair side by side. This block stores the rows and reads the matrix out column
// by column, one drawer pair per cycle, as a map1 word and a map2 word.
//
// Bit mapping of a column (one link): word w (rows 16w..16w+15) belongs to FE
// board w; its bits 0..7 are that board's map1 pixels 0..7 and bits 8..15 its
// map2 pixels. Byte w of the output words is therefore FE board w. This split
// of the 64 link bits is this design's choice; the published description only
// says that each link carries 64 bits from 32 pixels of 4 FE boards and that
// each byte of a 32-bit word maps to one FE board.
//
// Two banks are used so that the next event can be received while the previous
// one is read out. An event that arrives while both banks are occupied is
// dropped and reported by an overflow pulse.
//
// Interface: row_* and event_done come from fe_link_deser. The output is a
// valid/ready stream of N_LINKS drawer words per event, out_last on the final
// one. Latency: the first word is offered the cycle after event_done.
module matrix_transpose
  import l2_pkg::*;
#(
  parameter int N_LINKS = l2_pkg::N_LINKS,
  parameter int ROWS    = l2_pkg::MATRIX_ROWS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     row_we,
  input  logic [$clog2(ROWS)-1:0]  row_addr,
  input  logic [N_LINKS-1:0]       row_data,
  input  logic                     event_done,
  output logic                     out_valid,
  input  logic                     out_ready,
  output drawer_maps_t             out_data,
  output logic                     out_last,
  output logic                     overflow
);

  localparam int HALF = WORD_BITS / 2;   // 8 bits of each map per FE board

  logic [N_LINKS-1:0]         mat [2][ROWS];
  logic [1:0]                 full;
  logic                       wb, rb;        // write bank, read bank
  logic                       dropping;
  logic [$clog2(N_LINKS)-1:0] col;

  // Column view of the read bank
  always_comb begin
    out_data = '0;
    for (int w = 0; w < FE_PER_DRAWER; w++)
      for (int b = 0; b < PIX_PER_FE; b++) begin
        out_data.map1[PIX_PER_FE*w + b] = mat[rb][WORD_BITS*w + b][col];
        out_data.map2[PIX_PER_FE*w + b] = mat[rb][WORD_BITS*w + HALF + b][col];
      end
  end

  assign out_valid = full[rb];
  assign out_last  = out_valid && (col == $clog2(N_LINKS)'(N_LINKS - 1));

  always_ff @(posedge clk) begin
    if (row_we && !full[wb]) mat[wb][row_addr] <= row_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full     <= '0;
      wb       <= 1'b0;
      rb       <= 1'b0;
      col      <= '0;
      dropping <= 1'b0;
      overflow <= 1'b0;
    end else begin
      overflow <= 1'b0;
      if (row_we && full[wb]) dropping <= 1'b1;
      // read side
      if (out_valid && out_ready) begin
        if (out_last) begin
          full[rb] <= 1'b0;
          rb       <= ~rb;
          col      <= '0;
        end else col <= col + 1'b1;
      end
      // write side
      if (event_done) begin
        if (dropping || full[wb] || (row_we && full[wb])) begin
          overflow <= 1'b1;
          dropping <= 1'b0;
        end else begin
          full[wb] <= 1'b1;
          wb       <= ~wb;
        end
      end
    end
  end

endmodule
