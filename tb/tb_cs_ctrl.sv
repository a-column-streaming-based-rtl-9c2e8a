// tb_cs_ctrl -- unit test of the pass sequencer.
//
// For several layer sizes it lists here, independently, the reads a run must
// issue: for each channel and filter column j, for each output column mo, the
// segments rb = 0, ops, .. below m, plus a tail segment in narrow mode when the
// column has pixels left (n >= rb+2). It checks every read (channel, column,
// row, tail flag, first-pass flag, output address, lane mask), the weight
// preloads (channel, column, one per pass, not while reading), the drain gap
// between passes, done, and that bad sizes end with err.
module tb_cs_ctrl;
  import cs_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0;
  logic [K_W-1:0] k = '0;
  logic [COORD_W-1:0] n = '0;
  logic [CH_W-1:0] nch = '0;
  logic [OPS_W-1:0] ops;
  logic wide;
  logic [K_W-1:0] k_q;
  logic [COORD_W-1:0] n_q;
  logic busy, done, err, wload, fr_en;
  logic [CH_W-1:0] w_ch, fr_ch;
  logic [WIDX_W-1:0] w_col;
  logic [COORD_W-1:0] fr_col, fr_row;
  set_meta_t meta;

  cs_ctrl #(.N_MAX(227), .MAX_CH(3)) u_dut (.*);

  // the mapping's outputs per set, computed here from the latched k
  assign wide = (k_q >= 6);
  assign ops  = (k_q >= 6) ? OPS_W'(22 - int'(k_q)) : OPS_W'(20);

  int checks = 0, failures = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic run(int kk, int nn, int cc);
    int mm, o, addr, gap, last_read;
    logic [NOUT-1:0] mask;
    mm = nn - kk + 1;
    o  = (kk >= 6) ? 22 - kk : 20;
    @(negedge clk);
    start = 1'b1; k = K_W'(kk); n = COORD_W'(nn); nch = CH_W'(cc);
    @(negedge clk);
    start = 1'b0;
    for (int ch = 0; ch < cc; ch++)
      for (int j = 0; j < kk; j++) begin
        // weight preload
        chk(wload && w_ch == CH_W'(ch) && w_col == WIDX_W'(j) && !fr_en,
            $sformatf("k=%0d wload ch %0d col %0d", kk, ch, j));
        @(negedge clk);
        addr = 0;
        for (int mo = 0; mo < mm; mo++) begin
          int rb;
          rb = 0;
          while (1) begin
            bit is_tail;
            is_tail = (rb >= mm);
            for (int l = 0; l < NOUT; l++) mask[l] = !is_tail && l < o && rb + l < mm;
            chk(fr_en && !wload && fr_ch == CH_W'(ch) && int'(fr_col) == mo + j && int'(fr_row) == rb,
                $sformatf("k=%0d n=%0d read ch%0d j%0d mo%0d rb%0d: got en=%0d col=%0d row=%0d",
                          kk, nn, ch, j, mo, rb, fr_en, fr_col, fr_row));
            chk(meta.valid && meta.out == !is_tail && meta.first == (ch == 0 && j == 0) &&
                (is_tail || int'(meta.addr) == addr) && meta.mask == mask,
                $sformatf("k=%0d meta mo%0d rb%0d", kk, mo, rb));
            @(negedge clk);
            if (is_tail) break;
            addr++;
            rb += o;
            if (rb < mm) continue;
            if (kk <= 5 && nn >= rb + 2) continue;   // tail segment
            break;
          end
        end
        // drain
        gap = 0;
        while (!wload && !done && gap < 100) begin
          chk(!fr_en, "read during drain");
          @(negedge clk);
          gap++;
        end
        if (ch == cc - 1 && j == kk - 1) chk(done && !err, $sformatf("k=%0d done", kk));
        else chk(gap == DRAIN_CYC, $sformatf("k=%0d drain %0d cycles", kk, gap));
      end
    @(negedge clk);
    chk(!busy, "busy after done");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(3, 5, 1);
    run(4, 23, 1);     // tail
    run(5, 50, 2);
    run(7, 20, 1);
    run(11, 40, 3);
    // bad sizes
    @(negedge clk);
    start = 1'b1; k = K_W'(12); n = COORD_W'(30); nch = 1;
    @(negedge clk); start = 1'b0;
    chk(err && done && !busy, "k=12 not rejected");
    @(negedge clk);
    start = 1'b1; k = K_W'(5); n = COORD_W'(4); nch = 1;
    @(negedge clk); start = 1'b0;
    chk(err && done && !busy, "n<k not rejected");
    @(negedge clk);
    start = 1'b1; k = K_W'(5); n = COORD_W'(30); nch = 0;
    @(negedge clk); start = 1'b0;
    chk(err && done && !busy, "nch=0 not rejected");
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
