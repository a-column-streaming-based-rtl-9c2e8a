// cs_reduce -- aligns the PE products of one column set and adds them per output.
//
// Because a set moves one column to the right per clock, PE column c holds its
// part of a set cfg.lag[c] clocks after the set's first column. Each PE product
// is therefore delayed by (COLS-1-lag[c]) clocks, which lines up all products of
// one set in the same cycle.
//
// Every mapping gives each output slot one contiguous run of PEs, either down a
// column (vertical filter column) or along a row (horizontal filter column). The
// adders exploit this: a running sum goes down every column and another along
// every row, each restarting where the slot number changes. At the last PE of a
// run (the next PE down or to the right has another slot) the running sum is the
// whole output. Where each run ends depends only on k, so sums[o] is a small
// multiplexer indexed by k over those run ends (the function run_end mirrors
// cs_mapper). Slots a mapping does not use read zero. cfg and k must therefore
// come from cs_mapper for the same k; other slot layouts are not supported.
// Only the slot and lag fields of cfg are read; the PE sources belong to the
// array.
//
// Interface and timing: prod is sampled every cycle; the sums of the set whose
// column-0 products were on prod in cycle t appear on sums in cycle t+COLS.
// The paper states only that each output is an inner product of a filter column
// and a pixel column; this delay-and-segmented-add structure is this design's
// choice.
module cs_reduce
  import cs_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  prod_t    [ROWS-1:0][COLS-1:0] prod,
  input  map_cfg_t                      cfg,
  input  logic     [K_W-1:0]            k,
  output acc_t     [NOUT-1:0]           sums
);

  localparam int DMAX = COLS - 1;

  prod_t [ROWS-1:0][COLS-1:0] aligned;

  // One delay line per PE. It needs no reset: a tap is read only for sets that
  // have already filled it.
  for (genvar r = 0; r < ROWS; r++) begin : g_dr
    for (genvar c = 0; c < COLS; c++) begin : g_dc
      prod_t [DMAX-1:0] dly;
      always_ff @(posedge clk) dly <= {dly[DMAX-2:0], prod[r][c]};
      assign aligned[r][c] = (cfg.lag[c] >= LAG_W'(DMAX)) ? prod[r][c]
                                                          : dly[DMAX - 1 - int'(cfg.lag[c])];
    end
  end

  // running sums down the columns (v) and along the rows (h)
  acc_t [ROWS-1:0][COLS-1:0] vsum, hsum;
  acc_t [NOUT-1:0]           sums_d;

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      if (r > 0) begin : g_up
        assign vsum[r][c] = ACC_W'(aligned[r][c])
                          + ((cfg.slot[r][c] == cfg.slot[r-1][c]) ? vsum[r-1][c] : '0);
      end else begin : g_top
        assign vsum[r][c] = ACC_W'(aligned[r][c]);
      end
      if (c > 0) begin : g_left
        assign hsum[r][c] = ACC_W'(aligned[r][c])
                          + ((cfg.slot[r][c] == cfg.slot[r][c-1]) ? hsum[r][c-1] : '0);
      end else begin : g_first
        assign hsum[r][c] = ACC_W'(aligned[r][c]);
      end
    end
  end

  // Position of the last PE of output o's run for filter size kk, as
  // row * COLS + column, or -1 if the mapping has no output o. Bit 8 flags a
  // vertical run. Mirrors the layouts of cs_mapper.
  function automatic int run_end(int o, int kk);
    int b, oo, vrows;
    if (kk <= 5) begin
      b     = o / (ROWS - 1);
      oo    = o % (ROWS - 1);
      vrows = ((ROWS - 1) / kk) * kk;
      if (oo < vrows) return 256 + ((oo / kk) * kk + kk - 1) * COLS + b * kk + oo % kk;
      else            return oo * COLS + b * kk + kk - 1;
    end
    if (o < COLS)                return 256 + (kk - 1) * COLS + o;
    if (o < COLS + ROWS - kk)    return (o - COLS + kk) * COLS + COLS - 1;
    return -1;
  endfunction

  // cand[o][j]: output o when k = KMIN + j
  for (genvar o = 0; o < NOUT; o++) begin : g_o
    acc_t [KMAX-KMIN:0] cand;
    for (genvar j = 0; j <= KMAX - KMIN; j++) begin : g_k
      localparam int E = run_end(o, KMIN + j);
      if (E < 0) begin : g_none
        assign cand[j] = '0;
      end else if (E >= 256) begin : g_vert
        assign cand[j] = vsum[(E - 256) / COLS][(E - 256) % COLS];
      end else begin : g_horz
        assign cand[j] = hsum[E / COLS][E % COLS];
      end
    end
    assign sums_d[o] = (int'(k) >= KMIN && int'(k) <= KMAX) ? cand[int'(k) - KMIN] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sums <= '0;
    else        sums <= sums_d;
  end

endmodule
