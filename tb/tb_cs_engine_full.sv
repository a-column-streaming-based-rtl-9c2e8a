// tb_cs_engine_full -- full-size run: the 227 x 227 feature map of the comparison.
//
// The engine at its default parameters computes a single-channel 227 x 227 layer
// (the input size of AlexNet) once for every filter size 3..11. Every output
// pixel is compared with a direct convolution computed here, and the cycle count
// of each run is checked against passes * (1 + sets + DRAIN_CYC) + 1 and printed,
// so that it can be set beside the required-cycle curve of the column streaming
// method (about 1.1e4 cycles for k = 4).
module tb_cs_engine_full;
  import cs_pkg::*;

  localparam int NM = 227;
  localparam int MC = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0;
  logic [K_W-1:0] k = '0;
  logic [COORD_W-1:0] n = '0;
  logic [CH_W-1:0] nch = '0;
  logic busy, done, err;
  logic fw_en = 1'b0, bias_we = 1'b0;
  logic [CH_W-1:0] fw_ch = '0;
  logic [WIDX_W-1:0] fw_row = '0, fw_col = '0;
  data_t fw_data = '0, bias_data = '0;
  logic fr_en;
  logic [CH_W-1:0] fr_ch;
  logic [COORD_W-1:0] fr_col, fr_row;
  data_t [SEG-1:0] fr_data;
  logic om_re, om_we;
  logic [ADDR_W-1:0] om_raddr, om_waddr;
  acc_t [NOUT-1:0] om_rdata, om_wdata;
  logic [NOUT-1:0] om_wmask;

  cs_engine u_dut (.*);

  tb_feat_mem #(.N_MAX(NM), .MAX_CH(MC)) u_fm (
    .clk, .rd_en(fr_en), .rd_ch(fr_ch), .rd_col(fr_col), .rd_row(fr_row), .rd_data(fr_data));

  tb_out_mem u_om (
    .clk, .re(om_re), .raddr(om_raddr), .rdata(om_rdata),
    .we(om_we), .waddr(om_waddr), .wmask(om_wmask), .wdata(om_wdata));

  int checks = 0, failures = 0;
  int n_narrow = 0, n_wide = 0, n_tail = 0, n_wire = 0, n_lane = 0, n_wload = 0,
      n_multich = 0, n_err = 0;

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    if (fr_en && !u_dut.meta.out) n_tail++;
    if (u_dut.wload) n_wload++;
    if (u_dut.wload && u_dut.w_ch != '0) n_multich++;
    if (fr_en && !u_dut.cfg.wide && u_dut.cfg.pe[ROWS-1][1].src == SRC_WIRE) n_wire++;
    if (fr_en && u_dut.cfg.wide && u_dut.bus2[ROWS-1] != '0) n_lane++;
  end

  data_t img [MC][NM][NM];       // [ch][col][row]
  data_t flt [MC][KMAX][KMAX];   // [ch][row][col]

  task automatic run_case(int kk, int nn, int cc);
    int mm, ops, sets, tail, exp_cyc, cyc, bias, rb;
    longint refv, got;
    int bad;
    mm  = nn - kk + 1;
    ops = (kk <= 5) ? NOUT : (COLS + ROWS - kk);
    sets = (mm + ops - 1) / ops;
    tail = (kk <= 5 && nn >= sets * ops + 2) ? 1 : 0;
    exp_cyc = kk * cc * (1 + mm * (sets + tail) + DRAIN_CYC) + 1;  // +1: done is registered
    // data
    for (int ch = 0; ch < cc; ch++)
      for (int x = 0; x < nn; x++)
        for (int y = 0; y < nn; y++) begin
          img[ch][x][y] = data_t'($signed($urandom_range(255)) - 128);
          u_fm.put(ch, x, y, img[ch][x][y]);
        end
    // rows below the image hold garbage that the engine must ignore
    for (int ch = 0; ch < cc; ch++)
      for (int x = 0; x < nn; x++)
        for (int y = nn; y < NM; y++) u_fm.put(ch, x, y, data_t'($urandom));
    bias = $signed($urandom_range(2000)) - 1000;
    @(negedge clk);
    for (int ch = 0; ch < cc; ch++)
      for (int i = 0; i < kk; i++)
        for (int j = 0; j < kk; j++) begin
          flt[ch][i][j] = data_t'($signed($urandom_range(255)) - 128);
          fw_en = 1'b1; fw_ch = CH_W'(ch); fw_row = WIDX_W'(i); fw_col = WIDX_W'(j);
          fw_data = flt[ch][i][j];
          @(negedge clk);
        end
    fw_en = 1'b0;
    bias_we = 1'b1; bias_data = data_t'(bias);
    @(negedge clk);
    bias_we = 1'b0;
    start = 1'b1; k = K_W'(kk); n = COORD_W'(nn); nch = CH_W'(cc);
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done && cyc < 400000) begin @(negedge clk); cyc++; end
    checks++;
    if (err) begin failures++; $display("FAIL k=%0d n=%0d: err", kk, nn); end
    checks++;
    if (cyc != exp_cyc) begin
      failures++;
      $display("FAIL k=%0d n=%0d ch=%0d: %0d cycles, expected %0d", kk, nn, cc, cyc, exp_cyc);
    end
    if (kk <= 5) n_narrow++; else n_wide++;
    // compare
    bad = 0;
    for (int mo = 0; mo < mm; mo++)
      for (int r = 0; r < mm; r++) begin
        refv = bias;
        for (int ch = 0; ch < cc; ch++)
          for (int i = 0; i < kk; i++)
            for (int j = 0; j < kk; j++)
              refv += longint'(flt[ch][i][j]) * longint'(img[ch][mo+j][r+i]);
        got = u_om.get(mo * sets + r / ops, r % ops);
        checks++;
        if (got != refv) begin
          failures++;
          if (bad < 5) $display("FAIL k=%0d n=%0d out(r=%0d,c=%0d) = %0d, expected %0d",
                                kk, nn, r, mo, got, refv);
          bad++;
        end
      end
    $display("case k=%0d n=%0d nch=%0d: %0d cycles, %0d bad outputs", kk, nn, cc, cyc, bad);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int kk = 3; kk <= 11; kk++) run_case(kk, 227, 1);
    checks++; if (n_narrow == 0) failures++;
    checks++; if (n_wide == 0)   failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
