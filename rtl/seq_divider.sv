// seq_divider -- signed integer division, one quotient bit per clock.
//
// Restoring division on magnitudes: quotient = trunc(dividend / divisor), the
// sign applied afterwards, so the result rounds towards zero. `start` loads
// the operands; `done` pulses W+1 cycles later with the quotient. A zero
// divisor returns zero and sets div_by_zero. Used by cog_cut to form the centre
// of gravity in 1/32 units without a combinational divider.
//
// Interface: start, dividend, divisor (signed W bits) in; done, quotient,
// div_by_zero out. Timing: done W+1 cycles after start, busy in between.
// This helper is entirely this design's own; the published system divided in
// software.
module seq_divider #(
  parameter int W = 40
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [W-1:0] dividend,
  input  logic signed [W-1:0] divisor,
  output logic signed [W-1:0] quotient,
  output logic                div_by_zero,
  output logic                done
);

  logic [W-1:0]         rem, quo, dsr;
  logic                 neg, busy;
  logic [$clog2(W+1)-1:0] n;
  logic [W:0]           trial;

  assign trial = {rem, quo[W-1]} - {1'b0, dsr};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem <= '0; quo <= '0; dsr <= '0; neg <= 1'b0; busy <= 1'b0; n <= '0;
      quotient <= '0; div_by_zero <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem  <= '0;
        quo  <= dividend[W-1] ? W'(-dividend) : dividend;
        dsr  <= divisor[W-1] ? W'(-divisor) : divisor;
        neg  <= dividend[W-1] ^ divisor[W-1];
        n    <= ($clog2(W+1))'(W);
        busy <= 1'b1;
      end else if (busy) begin
        if (n != 0) begin
          // shift the next dividend bit into the remainder and try to subtract
          if (!trial[W]) begin
            rem <= trial[W-1:0];
            quo <= {quo[W-2:0], 1'b1};
          end else begin
            rem <= {rem[W-2:0], quo[W-1]};
            quo <= {quo[W-2:0], 1'b0};
          end
          n <= n - 1'b1;
        end else begin
          busy        <= 1'b0;
          done        <= 1'b1;
          div_by_zero <= (dsr == 0);
          quotient    <= (dsr == 0) ? '0 : (neg ? W'(-quo) : quo);
        end
      end
    end
  end

endmodule
