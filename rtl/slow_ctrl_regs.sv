// slow_ctrl_regs -- slow-control registers of the L2 decision algorithm.
//
// Holds the parameters of the centre-of-gravity algorithm that the control
// system sets between runs: the pointed target's camera coordinates (in 1/32
// of the unit length), the squared cog threshold, and the two pixel
// thresholds delta1 and delta2 that weight map1 and map2. Their current values
// are copied into the trigger-info FIFO with every L1 event, so a change takes
// effect from the next event on and never in the middle of one.
//
// Register map (word addresses, 32-bit data), this design's own choice:
//   0: xc (signed, low 16 bits)      1: yc (signed, low 16 bits)
//   2: tau2 (unsigned 32 bits)       3: delta1 (bits 7:0), delta2 (bits 15:8)
// Writes take effect on the next clock; rd_data is combinational. Reset values:
// target at the camera centre, tau2 = (32*1 unit)^2 * 1 = 1024, delta1 = 3,
// delta2 = 7 (the (3, 7) thresholds used in the published rate studies).
module slow_ctrl_regs
  import l2_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [1:0]  addr,
  input  logic [31:0] wr_data,
  output logic [31:0] rd_data,
  output l2_params_t  params
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      params.xc     <= '0;
      params.yc     <= '0;
      params.tau2   <= 32'd1024;
      params.delta1 <= 8'd3;
      params.delta2 <= 8'd7;
    end else if (wr_en) begin
      unique case (addr)
        2'd0: params.xc   <= wr_data[COORD_W-1:0];
        2'd1: params.yc   <= wr_data[COORD_W-1:0];
        2'd2: params.tau2 <= wr_data;
        2'd3: begin
          params.delta1 <= wr_data[7:0];
          params.delta2 <= wr_data[15:8];
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    unique case (addr)
      2'd0: rd_data = 32'(signed'(params.xc));
      2'd1: rd_data = 32'(signed'(params.yc));
      2'd2: rd_data = params.tau2;
      2'd3: rd_data = {16'd0, params.delta2, params.delta1};
      default: rd_data = '0;
    endcase
  end

endmodule
