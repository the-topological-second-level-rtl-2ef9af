// fe_link_tx_model -- behavioural model of the 64 front-end link transmitters.
//
// Sends one event as the front end does: on every link 4 words, each a start
// bit, two ID bits (word index, MSB first) and 16 data bits (MSB first), OVS
// clock cycles per symbol and `gap` low cycles between words. Word w of link L
// carries map1 bits 8w..8w+7 of drawer L in its bits 0..7 and the map2 bits in
// bits 8..15. All links are driven in step. `bad_id_link` >= 0 corrupts the ID
// of that link in word 1.
// Interface: lines (64 outputs) driven on clk; the task blocks for the whole
// event. Following the published link format; idle-low lines, the byte split
// and the shared timing are this design's own choices. Not synthesizable.
module fe_link_tx_model #(
  parameter int OVS = 4
) (
  input  logic        clk,
  output logic [63:0] lines
);
  initial lines = '0;

  task automatic send_event(input bit [31:0] m1 [64], input bit [31:0] m2 [64],
                            input int gap, input int bad_id_link = -1);
    for (int w = 0; w < 4; w++) begin
      bit [15:0] wd [64];
      for (int l = 0; l < 64; l++) wd[l] = {m2[l][8*w +: 8], m1[l][8*w +: 8]};
      for (int s = 0; s < 19; s++) begin
        logic [63:0] v;
        for (int l = 0; l < 64; l++) begin
          bit [1:0] id = 2'(w);
          if (l == bad_id_link && w == 1) id = ~id;
          if (s == 0)      v[l] = 1'b1;
          else if (s < 3)  v[l] = id[2 - s];
          else             v[l] = wd[l][15 - (s - 3)];
        end
        repeat (OVS) begin
          @(posedge clk);
          lines <= v;
        end
      end
      repeat (gap) begin
        @(posedge clk);
        lines <= '0;
      end
    end
  endtask
endmodule
