// tb_cs_pe_array -- unit test of the PE array interconnect.
//
// Gives every PE a random source (including both diagonals, wires and lanes),
// every bottom-row wire a random source and every PE a random weight index,
// then streams random bus values. A model of the array kept here (its own
// arrays, updated by the interconnect rules) is compared with every PE's
// feature register and product on every cycle.
module tb_cs_pe_array;
  import cs_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  data_t [ROWS-1:0] bus1 = '0, bus2 = '0;
  map_cfg_t cfg = '0;
  logic wload = 1'b0;
  data_t [KMAX-1:0] wcol = '0;
  data_t [ROWS-1:0][COLS-1:0] feat;
  prod_t [ROWS-1:0][COLS-1:0] prod;

  cs_pe_array u_dut (.*);

  int checks = 0, failures = 0;
  data_t mf [ROWS][COLS];
  data_t mw [ROWS][COLS];
  data_t nf [ROWS][COLS];

  function automatic data_t src_val(int r, int c);
    int ws;
    case (cfg.pe[r][c].src)
      SRC_BUS1:   return bus1[r];
      SRC_BUS2:   return bus2[r];
      SRC_DIAG_L: return (r + 1 < ROWS && c > 0) ? mf[r+1][c-1] : '0;
      SRC_DIAG_R: return (r + 1 < ROWS && c + 1 < COLS) ? mf[r+1][c+1] : '0;
      SRC_WIRE: begin
        if (r != ROWS - 1) return '0;
        ws = int'(cfg.wire_src[c]);
        if (ws < NPE) return mf[ws / COLS][ws % COLS];
        if (ws < NPE + ROWS) return bus1[ws - NPE];
        return '0;
      end
      SRC_LANE:   return (r == ROWS - 1) ? bus2[c] : '0;
      default:    return '0;
    endcase
  endfunction

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        cfg.pe[r][c].src  = pe_src_e'($urandom_range(6));
        cfg.pe[r][c].widx = WIDX_W'($urandom_range(KMAX - 1));
        mf[r][c] = '0; mw[r][c] = '0;
      end
    for (int c = 0; c < COLS; c++) cfg.wire_src[c] = WSRC_W'($urandom_range(WSRC_N - 1));
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // weight preload
    for (int i = 0; i < KMAX; i++) wcol[i] = data_t'($urandom);
    wload = 1'b1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) mw[r][c] = wcol[cfg.pe[r][c].widx];
    for (int t = 0; t < 300; t++) begin
      for (int r = 0; r < ROWS; r++) begin
        bus1[r] = data_t'($urandom);
        bus2[r] = data_t'($urandom);
      end
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) nf[r][c] = src_val(r, c);
      @(negedge clk);
      wload = 1'b0;
      mf = nf;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (feat[r][c] !== mf[r][c] || prod[r][c] !== prod_t'(mf[r][c]) * prod_t'(mw[r][c])) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d PE(%0d,%0d) src=%0d feat=%0d exp=%0d",
                                        t, r, c, cfg.pe[r][c].src, feat[r][c], mf[r][c]);
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
