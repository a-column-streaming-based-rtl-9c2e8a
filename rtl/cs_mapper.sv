// cs_mapper -- the column streaming mapping algorithm, as combinational logic.
//
// From the filter size k it derives how the 11 x 11 PE array is wired and which
// filter-column weight each PE holds. One filter column w[0..k-1] is applied to
// a column set of pixels x[rb ..]; output slot o of the set is the 1-D column
// convolution y[o] = sum_i w[i] * x[rb + o + i]. In steady state PE (r, c) holds
// set pixel r + c (plus 10 in the second narrow block), so a group of PEs whose
// weights w[i] meet pixels o + i produces y[o].
//
// Narrow mode, k = 3..5 (paper Figs. 6 and 8): two blocks of k columns. Block 0
// (columns 0..k-1) is fed by bus 1 in column 0 with x[rb..rb+10]; block 1
// (columns k..2k-1) by bus 2 in column k with x[rb+10..rb+20]. Within a block,
// rows 0..G*k-1 (G = floor(10/k)) carry the filter column vertically -- column cc
// of vertical group g gives y[10b + g*k + cc] -- and the remaining rows up to 9
// carry it horizontally across the k columns, row r giving y[10b + r]. Each block
// yields 10 outputs, the set 20 (the paper's "n-th set is (n-1)x20 to nx20").
// Pixels a block needs beyond its own sub-column enter its bottom row through the
// wires: block 0 takes them from PE (1, k+cc-1) of block 1, block 1 from the next
// set, one row above (bus-1 lane 1, then PE (2, cc-2)).
//
// Wide mode, k = 6..11 (paper Figs. 9 and 10): one block of 11 columns fed by
// bus 1 in column 0. Rows 0..k-1 carry the filter column vertically in all 11
// columns (y[0..10]); rows k..10 carry it horizontally in columns 11-k..10
// (y[11..21-k]). 22-k outputs per set (15 for k = 7, as in the paper). Bottom row
// PE (10, c) takes x[rb+10+c] from bus-2 lane c, which the streamer delays by c
// clocks ("the data in the n-th set is one clock behind the (n-1)-th set").
//
// Column c of a block lags its set by cc clocks; cfg.lag tells the reduction.
// PEs not used by a mapping (the paper's spare PEs) select zero and no slot.
// The vertical/horizontal layouts follow the paper's figures; the wire endpoints,
// the bus-2 lane feed of wide mode and the encodings are this design's choices.
// k outside 3..11 gives an all-zero configuration and k_ok = 0.
module cs_mapper
  import cs_pkg::*;
(
  input  logic [K_W-1:0] k,
  output map_cfg_t       cfg,
  output logic           k_ok
);

  localparam int BLK_OUT = ROWS - 1;   // outputs of one narrow block

  always_comb begin
    int kk, vrows, b, cc;
    kk    = int'(k);
    vrows = 0;
    b     = 0;
    cc    = 0;
    k_ok = (kk >= KMIN) && (kk <= KMAX);
    cfg  = '0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        cfg.pe[r][c].src  = SRC_ZERO;
        cfg.slot[r][c]    = SLOT_NONE;
      end

    if (k_ok && kk <= 5) begin
      // ---------------- narrow mode ----------------
      cfg.wide = 1'b0;
      cfg.ops  = OPS_W'(NOUT);
      vrows    = (BLK_OUT / kk) * kk;
      for (int c = 0; c < COLS; c++) begin
        if (c < 2 * kk) begin
          b  = (c >= kk) ? 1 : 0;
          cc = c - b * kk;
          cfg.lag[c] = LAG_W'(cc);
          for (int r = 0; r < ROWS; r++) begin
            if (cc == 0)          cfg.pe[r][c].src = (b == 0) ? SRC_BUS1 : SRC_BUS2;
            else if (r < ROWS-1)  cfg.pe[r][c].src = SRC_DIAG_L;
            else                  cfg.pe[r][c].src = SRC_WIRE;
            if (r < vrows) begin
              cfg.pe[r][c].widx = WIDX_W'(r % kk);
              cfg.slot[r][c]    = SLOT_W'(b * BLK_OUT + (r / kk) * kk + cc);
            end else if (r < BLK_OUT) begin
              cfg.pe[r][c].widx = WIDX_W'(cc);
              cfg.slot[r][c]    = SLOT_W'(b * BLK_OUT + r);
            end
          end
          if (cc >= 1) begin
            if (b == 0)       cfg.wire_src[c] = WSRC_W'(1 * COLS + kk + cc - 1);
            else if (cc == 1) cfg.wire_src[c] = WSRC_W'(NPE + 1);
            else              cfg.wire_src[c] = WSRC_W'(2 * COLS + cc - 2);
          end
        end
      end
    end else if (k_ok) begin
      // ---------------- wide mode ----------------
      cfg.wide = 1'b1;
      cfg.ops  = OPS_W'(COLS + ROWS - kk);
      for (int c = 0; c < COLS; c++) begin
        cfg.lag[c] = LAG_W'(c);
        for (int r = 0; r < ROWS; r++) begin
          if (c == 0)          cfg.pe[r][c].src = SRC_BUS1;
          else if (r < ROWS-1) cfg.pe[r][c].src = SRC_DIAG_L;
          else                 cfg.pe[r][c].src = SRC_LANE;
          if (r < kk) begin
            cfg.pe[r][c].widx = WIDX_W'(r);
            cfg.slot[r][c]    = SLOT_W'(c);
          end else if (c >= COLS - kk) begin
            cfg.pe[r][c].widx = WIDX_W'(c - (COLS - kk));
            cfg.slot[r][c]    = SLOT_W'(r + COLS - kk);
          end
        end
      end
    end
  end

endmodule
