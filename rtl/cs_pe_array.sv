// cs_pe_array -- the 11 x 11 PE array with its streaming interconnect.
//
// Every PE (cs_pe) can take its next feature from bus 1 or bus 2 (lane = its
// row), from its lower-left or lower-right diagonal neighbour, or, in the bottom
// row, from a programmable wire or from bus-2 lane = its column. With the
// lower-left source a pixel entering column 0 at row r moves one column right and
// one row up per clock, so that in steady state PE (r, c) holds pixel r + c of the
// set that entered c clocks earlier -- the pattern printed in the paper's Fig. 6.
// The bottom-row wires stand for the reconfigurable "wire1..wire4" connections of
// Fig. 6: a wire's source may be any PE of the array or any bus-1 lane, chosen by
// cfg.wire_src[c] (index r*COLS+c for PE (r, c), NPE+l for bus-1 lane l).
//
// Interface and timing:
//   bus1, bus2  ROWS lanes each, sampled by the PEs at the clock edge
//   cfg         mapping configuration from cs_mapper (static during a run)
//   wload, wcol weight preload: every PE latches wcol[cfg.pe[r][c].widx]
//   feat, prod  all PE feature registers and products (products combinational)
// The array shifts on every clock; it has no stall. The geometry follows the
// paper; the wire source range is this design's choice.
module cs_pe_array
  import cs_pkg::*;
(
  input  logic                           clk,
  input  logic                           rst_n,
  input  data_t    [ROWS-1:0]            bus1,
  input  data_t    [ROWS-1:0]            bus2,
  input  map_cfg_t                       cfg,
  input  logic                           wload,
  input  data_t    [KMAX-1:0]            wcol,
  output data_t    [ROWS-1:0][COLS-1:0]  feat,
  output prod_t    [ROWS-1:0][COLS-1:0]  prod
);

  // Flat list of wire sources.
  data_t [WSRC_N-1:0] wsrc;

  always_comb begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        wsrc[r*COLS + c] = feat[r][c];
    for (int l = 0; l < ROWS; l++)
      wsrc[NPE + l] = bus1[l];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      data_t diag_l, diag_r, wire_in, lane_in;

      if (r < ROWS - 1 && c > 0) begin : g_dl
        assign diag_l = feat[r+1][c-1];
      end else begin : g_dl0
        assign diag_l = '0;
      end

      if (r < ROWS - 1 && c < COLS - 1) begin : g_dr
        assign diag_r = feat[r+1][c+1];
      end else begin : g_dr0
        assign diag_r = '0;
      end

      if (r == ROWS - 1) begin : g_bottom
        assign wire_in = (int'(cfg.wire_src[c]) < WSRC_N) ? wsrc[cfg.wire_src[c]] : '0;
        assign lane_in = bus2[c];
      end else begin : g_inner
        assign wire_in = '0;
        assign lane_in = '0;
      end

      cs_pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .src      (cfg.pe[r][c].src),
        .in_bus1  (bus1[r]),
        .in_bus2  (bus2[r]),
        .in_diag_l(diag_l),
        .in_diag_r(diag_r),
        .in_wire  (wire_in),
        .in_lane  (lane_in),
        .wload    (wload),
        .wcol     (wcol),
        .widx     (cfg.pe[r][c].widx),
        .feat     (feat[r][c]),
        .prod     (prod[r][c])
      );
    end
  end

endmodule
