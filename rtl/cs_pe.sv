// cs_pe -- one processing element of the column streaming convolution engine.
//
// A PE holds one input-feature pixel in a register and one filter weight in a
// latch-like register, and outputs their product. As in the paper's Fig. 11,
// the feature register is fed through a multiplexer so that the array can be
// rewired for each filter size: from one of the two input buses, from the
// diagonal neighbour on either side, from a programmable wire (bottom row) or
// from a bus-2 lane (bottom row, wide mapping). Each clock the register takes the
// selected input, which is how data streams diagonally through the array.
//
// Interface and timing:
//   src               selects the feature source (cs_pkg::pe_src_e), static during a run
//   in_*              candidate feature inputs; the selected one is registered
//   wload / wcol/widx on wload the PE latches wcol[widx] as its weight
//   feat              registered feature (drives the neighbours)
//   prod              feat * weight, combinational from the two registers
// Both registers clear on reset. The multiplexer's input list and the reset are
// this design's choice; the register/multiplier structure follows the paper.
module cs_pe
  import cs_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  pe_src_e           src,
  input  data_t             in_bus1,
  input  data_t             in_bus2,
  input  data_t             in_diag_l,
  input  data_t             in_diag_r,
  input  data_t             in_wire,
  input  data_t             in_lane,
  input  logic              wload,
  input  data_t [KMAX-1:0]  wcol,
  input  logic [WIDX_W-1:0] widx,
  output data_t             feat,
  output prod_t             prod
);

  data_t weight;
  data_t feat_d;

  always_comb begin
    unique case (src)
      SRC_BUS1:   feat_d = in_bus1;
      SRC_BUS2:   feat_d = in_bus2;
      SRC_DIAG_L: feat_d = in_diag_l;
      SRC_DIAG_R: feat_d = in_diag_r;
      SRC_WIRE:   feat_d = in_wire;
      SRC_LANE:   feat_d = in_lane;
      default:    feat_d = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) feat <= '0;
    else        feat <= feat_d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         weight <= '0;
    else if (wload) weight <= (int'(widx) < KMAX) ? wcol[widx] : '0;
  end

  assign prod = PROD_W'(feat) * PROD_W'(weight);

endmodule
