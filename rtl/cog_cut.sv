// cog_cut -- centre-of-gravity cut of the L2 algorithm.
//
// From the first-order moments of the combined map the block forms the centre
// of gravity to 1/32 of the unit length,
//     cx = trunc(32*mx / m),   cy = trunc(32*my / m),
// and its squared nominal distance to the pointed target (xc, yc), also given
// in 1/32 units:
//     d2 = (cy - yc)^2 + 3 * (cx - xc)^2 .
// The factor 3 restores the sqrt(3) left out of the x coordinates of the
// triangular pixel grid. Comparing the squared distance with the squared
// threshold tau2 (1/1024 units) avoids a square root. The event is accepted
// when d2 < tau2, rejected otherwise or when m <= 0.
//
// Two seq_divider instances run in parallel; `done` rises W+2 clock edges
// after the edge that samples `start`, with accept, the centre of gravity and d2 held until the next start.
//
// Interface: start with stats and params, done/accept/cog_x/cog_y/dist2 out.
// Following the published design: 1/32-unit centre of gravity, the distance
// (cy-yc)^2 + 3(cx-xc)^2 and its comparison with a threshold. The divider
// width W = 40, truncation towards zero, the strict "<" and the tau2 units are
// this design's own choices.
module cog_cut
  import l2_pkg::*;
#(
  parameter int W = 40
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  moments_t                  stats,
  input  l2_params_t                params,
  output logic                      done,
  output logic                      accept,
  output logic signed [COORD_W-1:0] cog_x,
  output logic signed [COORD_W-1:0] cog_y,
  output logic [63:0]               dist2
);

  logic signed [W-1:0] nx, ny, den, qx, qy;
  logic                qdone, qdone_y, dz, dz_y;
  logic                m_pos;
  logic signed [W-1:0] dx, dy;
  logic [63:0]         d2;

  assign nx  = W'(stats.mx) <<< COG_FRAC_BITS;
  assign ny  = W'(stats.my) <<< COG_FRAC_BITS;
  assign den = W'(stats.m);

  seq_divider #(.W(W)) u_div_x (
    .clk, .rst_n, .start, .dividend(nx), .divisor(den),
    .quotient(qx), .div_by_zero(dz), .done(qdone)
  );
  seq_divider #(.W(W)) u_div_y (
    .clk, .rst_n, .start, .dividend(ny), .divisor(den),
    .quotient(qy), .div_by_zero(dz_y), .done(qdone_y)
  );

  assign dx = qx - W'(params.xc);
  assign dy = qy - W'(params.yc);
  assign d2 = 64'(dy * dy) + 64'(3) * 64'(dx * dx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_pos  <= 1'b0;
      done   <= 1'b0;
      accept <= 1'b0;
      cog_x  <= '0;
      cog_y  <= '0;
      dist2  <= '0;
    end else begin
      done <= 1'b0;
      if (start) m_pos <= (stats.m > 0);
      if (qdone) begin
        done   <= 1'b1;
        cog_x  <= COORD_W'(qx);
        cog_y  <= COORD_W'(qy);
        dist2  <= d2;
        accept <= m_pos && !dz && (d2 < 64'(params.tau2));
      end
    end
  end

  // Both dividers see the same divisor and finish together
  a_div_lockstep: assert property (@(posedge clk) disable iff (!rst_n) qdone == qdone_y);

endmodule
