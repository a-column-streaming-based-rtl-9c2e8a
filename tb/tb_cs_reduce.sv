// tb_cs_reduce -- unit test of the alignment and per-output adders.
//
// Takes the slot and lag configuration from cs_mapper for every k = 3..11 (the
// reduction relies on the mapper's contiguous runs), drives random products
// every cycle and keeps their history here. One cycle after products were
// driven in cycle u, sums[o] must equal the sum over PEs of slot o of the
// product driven in cycle u - (COLS-1-lag[c]). The wide mappings use every lag
// 0..10, the narrow ones both vertical and horizontal runs.
module tb_cs_reduce;
  import cs_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  prod_t [ROWS-1:0][COLS-1:0] prod = '0;
  map_cfg_t cfg;
  acc_t [NOUT-1:0] sums;
  logic [K_W-1:0] k = K_W'(KMIN);
  logic k_ok;

  cs_mapper u_map (.k, .cfg, .k_ok);
  cs_reduce u_dut (.clk, .rst_n, .prod, .cfg, .k, .sums);

  int checks = 0, failures = 0;
  prod_t h [32][ROWS][COLS];

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int u = 0; u < 9 * 60; u++) begin
      // k steps through 3..11, 60 cycles each
      k = K_W'(KMIN + u / 60);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          prod[r][c] = prod_t'($urandom);
          h[u % 32][r][c] = prod[r][c];
        end
      @(negedge clk);
      if (u >= COLS) begin
        for (int o = 0; o < NOUT; o++) begin
          longint e;
          e = 0;
          for (int r = 0; r < ROWS; r++)
            for (int c = 0; c < COLS; c++)
              if (int'(cfg.slot[r][c]) == o)
                e += longint'(h[(u - (COLS - 1 - int'(cfg.lag[c]))) % 32][r][c]);
          checks++;
          if (longint'(sums[o]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL u=%0d slot %0d: %0d exp %0d", u, o, sums[o], e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
