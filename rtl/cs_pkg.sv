// cs_pkg -- shared constants and types of the column streaming convolution engine.
//
// The engine computes a k x k convolution (k = 3..11) by decomposing the filter
// into its k columns. For one filter column it streams every needed image column
// through an 11 x 11 array of processing elements (PEs), a "column set" per clock,
// and the PE products of one set are added into one-dimensional column
// convolution results. The results of the k filter columns (and of every input
// channel) are accumulated into the output feature map.
//
// The array geometry (11 rows, 11 columns), the filter range 3..11 and the 20
// outputs per set for k = 3..5 follow the paper's figures. The 16-bit signed data
// width, the 40-bit accumulator and all encodings below are this design's
// choices.
package cs_pkg;

  // ---- array geometry (from the paper's Figs. 6, 8, 9, 10) ----
  localparam int ROWS   = 11;              // PE rows, the "j-height" of a sub-column
  localparam int COLS   = 11;              // PE columns
  localparam int KMIN   = 3;               // smallest supported filter size
  localparam int KMAX   = 11;              // largest supported filter size
  localparam int NOUT   = 2 * (ROWS - 1);  // outputs per column set, 20 for k = 3..5
  localparam int SEG    = 2 * ROWS - 1;    // pixels fetched per set, x[rb .. rb+20]
  localparam int NPE    = ROWS * COLS;

  // ---- word widths (own choice) ----
  localparam int DATA_W = 16;
  localparam int PROD_W = 2 * DATA_W;
  localparam int ACC_W  = 40;
  localparam int COORD_W = 9;              // image row/column coordinates
  localparam int ADDR_W = 16;              // output memory word address
  localparam int CH_W   = 2;               // input channel index

  // ---- configuration field widths ----
  localparam int WSRC_N = NPE + ROWS;      // wire sources: every PE, then bus-1 lanes
  localparam int WSRC_W = $clog2(WSRC_N);
  localparam int WIDX_W = $clog2(KMAX);
  localparam int SLOT_W = $clog2(NOUT + 1);
  localparam int LAG_W  = $clog2(COLS);
  localparam int K_W    = $clog2(KMAX + 1);
  localparam int OPS_W  = $clog2(NOUT + 1);
  localparam logic [SLOT_W-1:0] SLOT_NONE = '1;

  // ---- pipeline timing ----
  // A set read from the feature memory in cycle i is on the buses in cycle i+1,
  // held by PE column 0 in cycle i+2 and by column c in cycle i+2+c. The reduced
  // sums of the set leave the reduction in cycle i+2+COLS.
  localparam int LAT_SUMS  = 2 + COLS;     // read issue -> reduction output
  localparam int DRAIN_CYC = COLS + 3;     // idle cycles after the last read of a pass

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Source of a PE's feature register (the multiplexer of the paper's Fig. 11).
  typedef enum logic [2:0] {
    SRC_ZERO   = 3'd0,  // spare PE, holds zero
    SRC_BUS1   = 3'd1,  // bus 1, lane = PE row
    SRC_BUS2   = 3'd2,  // bus 2, lane = PE row (narrow mode entry column)
    SRC_DIAG_L = 3'd3,  // diagonal from the lower-left PE (row+1, col-1)
    SRC_DIAG_R = 3'd4,  // diagonal from the lower-right PE (row+1, col+1)
    SRC_WIRE   = 3'd5,  // programmable wire (bottom row only)
    SRC_LANE   = 3'd6   // bus 2, lane = PE column (bottom row only, wide mode)
  } pe_src_e;

  typedef struct packed {
    pe_src_e               src;
    logic [WIDX_W-1:0]     widx;   // element of the filter column this PE multiplies by
  } pe_cfg_t;

  typedef struct packed {
    pe_cfg_t [ROWS-1:0][COLS-1:0]         pe;
    logic    [ROWS-1:0][COLS-1:0][SLOT_W-1:0] slot;     // output slot, SLOT_NONE = unused
    logic    [COLS-1:0][WSRC_W-1:0]       wire_src; // source of each bottom-row wire
    logic    [COLS-1:0][LAG_W-1:0]        lag;      // cycles a column lags its set
    logic    [OPS_W-1:0]                  ops;      // outputs (and row advance) per set
    logic                                 wide;     // k >= 6 mapping
  } map_cfg_t;

  // Bookkeeping that travels with one column set through the pipeline.
  typedef struct packed {
    logic              valid;  // a set was issued
    logic              out;    // the set produces outputs (a tail set does not)
    logic              first;  // first pass: start from the bias
    logic [ADDR_W-1:0] addr;   // output memory word
    logic [NOUT-1:0]   mask;   // output lanes that lie inside the output map
  } set_meta_t;

endpackage
