// tb_cs_mapper -- checks the mapping for every filter size.
//
// For k = 3..11 it checks the outputs per set (20 for k <= 5, 22-k above) and
// that every output slot o < ops collects exactly k PEs whose weights w[i] meet
// set pixel o + i, where PE (r, c) holds pixel r + cc (+10 in the second narrow
// block, cc = column within the block). It then follows the data: a PE fed
// diagonally, by wire or by lane must receive, one clock earlier, the pixel it
// is meant to hold, taking into account that column c lags its set by lag[c]
// clocks and that consecutive sets are ops pixels apart. k = 1, 2, 12 must be
// rejected.
module tb_cs_mapper;
  import cs_pkg::*;

  logic [K_W-1:0] k;
  map_cfg_t cfg;
  logic k_ok;

  cs_mapper u_dut (.*);

  int checks = 0, failures = 0;

  // pixel held by PE (r, c) relative to the start of its set; -1 if none
  function automatic int elem(int kk, int r, int c);
    if (kk <= 5) begin
      if (c >= 2 * kk) return -1;
      return (c >= kk) ? (ROWS - 1) + r + (c - kk) : r + c;
    end
    return r + c;
  endfunction

  task automatic chk(bit ok, string what, int kk);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL k=%0d: %s", kk, what);
    end
  endtask

  initial begin
    for (int kk = 1; kk <= 12; kk++) begin
      k = K_W'(kk);
      #1;
      if (kk < 3 || kk > 11) begin
        chk(!k_ok, "k accepted", kk);
        continue;
      end
      chk(k_ok, "k rejected", kk);
      begin
        int ops, cnt, seen;
        ops = (kk <= 5) ? 20 : 22 - kk;
        chk(int'(cfg.ops) == ops, "ops", kk);
        chk(cfg.wide == (kk >= 6), "wide", kk);
        // slot contents
        for (int o = 0; o < ops; o++) begin
          cnt = 0; seen = 0;
          for (int r = 0; r < ROWS; r++)
            for (int c = 0; c < COLS; c++)
              if (int'(cfg.slot[r][c]) == o) begin
                cnt++;
                seen |= 1 << int'(cfg.pe[r][c].widx);
                chk(elem(kk, r, c) == o + int'(cfg.pe[r][c].widx),
                    $sformatf("slot %0d PE(%0d,%0d) pixel/weight mismatch", o, r, c), kk);
              end
          chk(cnt == kk && seen == (1 << kk) - 1, $sformatf("slot %0d has %0d PEs", o, cnt), kk);
        end
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++)
            if (cfg.slot[r][c] != SLOT_NONE)
              chk(int'(cfg.slot[r][c]) < ops, "slot beyond ops", kk);
        // data flow: pixel (absolute, set s = 0 at lag 0) each fed PE receives
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++) begin
            int want, lagc, got, sr, sc, ws;
            if (elem(kk, r, c) < 0) continue;
            want = elem(kk, r, c);      // set 0, seen at time lag[c]
            lagc = int'(cfg.lag[c]);
            got  = -1000;
            case (cfg.pe[r][c].src)
              SRC_BUS1: got = (lagc == 0) ? r : -999;
              SRC_BUS2: got = (lagc == 0) ? (ROWS - 1) + r : -999;
              SRC_DIAG_L: begin
                sr = r + 1; sc = c - 1;
                // source holds set (lagc-1-lag[sc]) at time lagc-1
                got = (lagc - 1 - int'(cfg.lag[sc])) * ops + elem(kk, sr, sc);
              end
              SRC_WIRE: begin
                ws = int'(cfg.wire_src[c]);
                if (ws >= NPE) got = (lagc - 1 + 1) * ops + (ws - NPE);   // bus holds set t+1 at time t
                else begin
                  sr = ws / COLS; sc = ws % COLS;
                  got = (lagc - 1 - int'(cfg.lag[sc])) * ops + elem(kk, sr, sc);
                end
              end
              SRC_LANE: got = (ROWS - 1) + c;   // streamer delays lane c by c clocks
              default: got = -1;
            endcase
            // only PEs whose pixel is used need to be right
            if (want <= ((kk <= 5) ? 2 * (ROWS - 1) + kk - 2 : 2 * (ROWS - 1)))
              chk(got == want, $sformatf("PE(%0d,%0d) src %0d gets pixel %0d, wants %0d",
                                         r, c, cfg.pe[r][c].src, got, want), kk);
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
