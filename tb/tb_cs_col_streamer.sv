// tb_cs_col_streamer -- unit test of the bus formation.
//
// Streams random segments with random start rows, image heights and gaps, in
// narrow and in wide mode. Keeps here the history of masked segments and checks
// every cycle: bus 1 = pixels 0..10 of the current segment; narrow bus 2 =
// pixels 10..20; wide bus-2 lane c = pixel 10+c of the segment c cycles earlier.
// Pixels at or below row n must read as zero, and so must cycles without data.
module tb_cs_col_streamer;
  import cs_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic rd_en = 1'b0, wide = 1'b0;
  logic [COORD_W-1:0] rd_row = '0, n = '0;
  data_t [SEG-1:0] pix = '0;
  data_t [ROWS-1:0] bus1, bus2;

  cs_col_streamer u_dut (.*);

  int checks = 0, failures = 0;
  data_t hist [64][SEG];   // masked segment on the buses in cycle t (mod 64)
  int    prow, pen;

  task automatic check_buses(int t);
    for (int r = 0; r < ROWS; r++) begin
      checks++;
      if (bus1[r] !== hist[t % 64][r]) begin
        failures++; $display("FAIL t=%0d bus1[%0d]=%0d exp %0d", t, r, bus1[r], hist[t % 64][r]);
      end
      checks++;
      if (!wide) begin
        if (bus2[r] !== hist[t % 64][ROWS-1+r]) begin
          failures++; $display("FAIL t=%0d bus2[%0d]", t, r);
        end
      end else if (r > 0 && t >= r + 20) begin
        if (bus2[r] !== hist[(t - r) % 64][ROWS-1+r]) begin
          failures++; $display("FAIL t=%0d lane %0d = %0d exp %0d", t, r, bus2[r], hist[(t - r) % 64][ROWS-1+r]);
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    pen = 0; prow = 0;
    for (int t = 0; t < 600; t++) begin
      if (t == 300) wide = 1'b1;
      n = COORD_W'(30 + $urandom_range(40));
      // data for the read issued in the previous cycle
      for (int i = 0; i < SEG; i++) pix[i] = data_t'($urandom);
      for (int i = 0; i < SEG; i++)
        hist[t % 64][i] = (pen != 0 && prow + i < int'(n)) ? pix[i] : '0;
      // new read
      rd_en  = ($urandom_range(4) != 0);
      rd_row = COORD_W'($urandom_range(60));
      #1;
      if (t > 0) check_buses(t);
      pen = rd_en; prow = int'(rd_row);
      @(negedge clk);
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
