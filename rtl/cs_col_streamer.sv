// cs_col_streamer -- turns fetched column segments into the two input buses.
//
// For each column set the controller reads the 21 pixels x[rb .. rb+20] of one
// image column from the feature memory (1-cycle read latency). The streamer
// registers the read request, zeroes pixels that lie below the image (row >= n)
// and drives the buses in the cycle the data returns:
//   narrow mode (k = 3..5): bus 1 = x[rb .. rb+10], bus 2 = x[rb+10 .. rb+20],
//     the two sub-columns of the paper's Fig. 6 (pixel rb+10 goes to both);
//   wide mode (k = 6..11):  bus 1 = x[rb .. rb+10]; bus-2 lane c (c = 1..10)
//     carries x[rb+10+c] delayed by c cycles, so that it reaches bottom-row PE
//     (10, c) exactly when the rest of its set passes column c (paper Fig. 9:
//     "the data in the n-th set is one clock behind the (n-1)-th set").
// The delay lines shift every cycle, like the array. With no read returning the
// buses carry zeros. The split of the segment follows the paper; the masking and
// the lane skew buffer are this design's way of doing it.
module cs_col_streamer
  import cs_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 rd_en,    // read issued this cycle
  input  logic [COORD_W-1:0]   rd_row,   // its first row rb
  input  logic [COORD_W-1:0]   n,        // image height
  input  logic                 wide,
  input  data_t [SEG-1:0]      pix,      // memory data, one cycle after rd_en
  output data_t [ROWS-1:0]     bus1,
  output data_t [ROWS-1:0]     bus2
);

  logic               pv;
  logic [COORD_W-1:0] prb;
  data_t [SEG-1:0]    pm;
  // skew[c][d]: lane c delayed by d+1 cycles (only d < c is used)
  data_t [ROWS-1:0][ROWS-1:0] skew;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pv  <= 1'b0;
      prb <= '0;
    end else begin
      pv  <= rd_en;
      prb <= rd_row;
    end
  end

  always_comb begin
    for (int i = 0; i < SEG; i++)
      pm[i] = (pv && (int'(prb) + i < int'(n))) ? pix[i] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      skew <= '0;
    end else begin
      for (int c = 1; c < ROWS; c++) begin
        skew[c][0] <= pm[ROWS-1+c];
        for (int d = 1; d < c; d++)
          skew[c][d] <= skew[c][d-1];
      end
    end
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      bus1[r] = pm[r];
      if (!wide)      bus2[r] = pm[ROWS-1+r];
      else if (r > 0) bus2[r] = skew[r][r-1];
      else            bus2[r] = '0;
    end
  end

endmodule
