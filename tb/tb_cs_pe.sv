// tb_cs_pe -- unit test of one processing element.
//
// Drives random values on every candidate input and random source selects,
// and checks one clock later that the feature register took the selected input
// (zero for SRC_ZERO and the unused encoding), and that prod equals the feature
// times the weight latched on the last wload (weight = wcol[widx]).
module tb_cs_pe;
  import cs_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  pe_src_e src = SRC_ZERO;
  data_t in_bus1 = '0, in_bus2 = '0, in_diag_l = '0, in_diag_r = '0, in_wire = '0, in_lane = '0;
  logic wload = 1'b0;
  data_t [KMAX-1:0] wcol = '0;
  logic [WIDX_W-1:0] widx = '0;
  data_t feat;
  prod_t prod;

  cs_pe u_dut (.*);

  int checks = 0, failures = 0;
  data_t exp_feat, exp_w;

  initial begin
    exp_w = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      src       = pe_src_e'($urandom_range(7));
      in_bus1   = data_t'($urandom);
      in_bus2   = data_t'($urandom);
      in_diag_l = data_t'($urandom);
      in_diag_r = data_t'($urandom);
      in_wire   = data_t'($urandom);
      in_lane   = data_t'($urandom);
      for (int i = 0; i < KMAX; i++) wcol[i] = data_t'($urandom);
      widx  = WIDX_W'($urandom_range(KMAX - 1));
      wload = ($urandom_range(3) == 0);
      case (src)
        SRC_BUS1:   exp_feat = in_bus1;
        SRC_BUS2:   exp_feat = in_bus2;
        SRC_DIAG_L: exp_feat = in_diag_l;
        SRC_DIAG_R: exp_feat = in_diag_r;
        SRC_WIRE:   exp_feat = in_wire;
        SRC_LANE:   exp_feat = in_lane;
        default:    exp_feat = '0;
      endcase
      if (wload) exp_w = wcol[widx];
      @(negedge clk);
      wload = 1'b0;
      checks++;
      if (feat !== exp_feat) begin
        failures++; $display("FAIL t=%0d src=%0d feat=%0d exp=%0d", t, src, feat, exp_feat);
      end
      checks++;
      if (prod !== prod_t'(exp_feat) * prod_t'(exp_w)) begin
        failures++; $display("FAIL t=%0d prod=%0d exp=%0d", t, prod, prod_t'(exp_feat) * prod_t'(exp_w));
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
