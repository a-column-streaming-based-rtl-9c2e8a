// tb_cs_filter_buf -- unit test of the filter store.
//
// Writes a random k x k x MAX_CH filter set and a bias, plus writes with an
// out-of-range channel that must be ignored, then reads every filter column
// of every channel and compares it with the written values.
module tb_cs_filter_buf;
  import cs_pkg::*;

  localparam int MC = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic we = 1'b0, bias_we = 1'b0;
  logic [CH_W-1:0] wch = '0, rch = '0;
  logic [WIDX_W-1:0] wrow = '0, wcolidx = '0, rcol = '0;
  data_t wdata = '0, bias_wdata = '0;
  data_t [KMAX-1:0] col_out;
  data_t bias;

  cs_filter_buf #(.MAX_CH(MC)) u_dut (.*);

  int checks = 0, failures = 0;
  data_t w [MC][KMAX][KMAX];
  data_t b;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int ch = 0; ch < MC; ch++)
      for (int i = 0; i < KMAX; i++)
        for (int j = 0; j < KMAX; j++) begin
          w[ch][i][j] = data_t'($urandom);
          we = 1'b1; wch = CH_W'(ch); wrow = WIDX_W'(i); wcolidx = WIDX_W'(j); wdata = w[ch][i][j];
          @(negedge clk);
        end
    // ignored: channel 3 does not exist
    wch = CH_W'(3); wrow = '0; wcolidx = '0; wdata = 16'h7777;
    @(negedge clk);
    we = 1'b0;
    b = data_t'($urandom);
    bias_we = 1'b1; bias_wdata = b;
    @(negedge clk);
    bias_we = 1'b0;
    checks++;
    if (bias !== b) begin failures++; $display("FAIL bias"); end
    for (int ch = 0; ch < MC; ch++)
      for (int j = 0; j < KMAX; j++) begin
        rch = CH_W'(ch); rcol = WIDX_W'(j);
        #1;
        for (int i = 0; i < KMAX; i++) begin
          checks++;
          if (col_out[i] !== w[ch][i][j]) begin
            failures++;
            $display("FAIL ch=%0d row=%0d col=%0d: %0d exp %0d", ch, i, j, col_out[i], w[ch][i][j]);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
