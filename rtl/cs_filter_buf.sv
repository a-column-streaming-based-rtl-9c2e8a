// cs_filter_buf -- the "Filters" store of the engine (paper Fig. 5).
//
// Holds one k x k filter per input channel (up to MAX_CH channels, k up to KMAX)
// and the layer's bias B. A host writes it one weight per clock before a run.
// During a run the controller selects filter column rcol of channel rch, which
// is presented on col_out (element i = filter row i) for the PEs to latch.
// Reads are combinational; writes take effect at the clock edge. Weight (row i,
// column j) multiplies pixel (row r+i, column m+j) of output (r, m). The
// register-file organisation and the write port are this design's choices.
module cs_filter_buf
  import cs_pkg::*;
#(
  parameter int MAX_CH = 3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                we,
  input  logic [CH_W-1:0]     wch,
  input  logic [WIDX_W-1:0]   wrow,
  input  logic [WIDX_W-1:0]   wcolidx,
  input  data_t               wdata,
  input  logic                bias_we,
  input  data_t               bias_wdata,
  input  logic [CH_W-1:0]     rch,
  input  logic [WIDX_W-1:0]   rcol,
  output data_t [KMAX-1:0]    col_out,
  output data_t               bias
);

  data_t [MAX_CH-1:0][KMAX-1:0][KMAX-1:0] w;   // [channel][row][column]

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w    <= '0;
      bias <= '0;
    end else begin
      if (we && int'(wch) < MAX_CH && int'(wrow) < KMAX && int'(wcolidx) < KMAX)
        w[wch][wrow][wcolidx] <= wdata;
      if (bias_we)
        bias <= bias_wdata;
    end
  end

  always_comb begin
    for (int i = 0; i < KMAX; i++)
      col_out[i] = (int'(rch) < MAX_CH && int'(rcol) < KMAX) ? w[rch][i][rcol] : '0;
  end

endmodule
