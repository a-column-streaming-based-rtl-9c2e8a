// tb_feat_mem -- behavioural model of the feature memory that feeds the engine.
//
// Holds MAX_CH channels of an N_MAX x N_MAX image, stored by [channel][column][row].
// A read request (rd_en, ch, col, row) returns in the next cycle the SEG pixels
// of rows row .. row+SEG-1 of that column; rows outside the image read as zero.
// The testbench fills it through the write port (one pixel per call, no timing).
module tb_feat_mem
  import cs_pkg::*;
#(
  parameter int N_MAX  = 227,
  parameter int MAX_CH = 3
) (
  input  logic               clk,
  input  logic               rd_en,
  input  logic [CH_W-1:0]    rd_ch,
  input  logic [COORD_W-1:0] rd_col,
  input  logic [COORD_W-1:0] rd_row,
  output data_t [SEG-1:0]    rd_data
);

  data_t mem [MAX_CH][N_MAX][N_MAX];

  function automatic void put(int ch, int col, int row, data_t v);
    mem[ch][col][row] = v;
  endfunction

  initial begin
    for (int c = 0; c < MAX_CH; c++)
      for (int x = 0; x < N_MAX; x++)
        for (int y = 0; y < N_MAX; y++)
          mem[c][x][y] = '0;
    rd_data = '0;
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int i = 0; i < SEG; i++) begin
        if (int'(rd_ch) < MAX_CH && int'(rd_col) < N_MAX && int'(rd_row) + i < N_MAX)
          rd_data[i] <= mem[rd_ch][rd_col][int'(rd_row) + i];
        else
          rd_data[i] <= '0;
      end
    end
  end

endmodule
