// tb_cs_accum -- unit test of the bias and read-modify-write accumulation.
//
// Runs three passes over 40 output words against the behavioural output memory:
// the first pass (first = 1) must write bias + sums, later passes must add to
// the stored value, and only lanes in the mask may change. Random gaps between
// sets are inserted. The expected memory is kept here and compared at the end.
module tb_cs_accum;
  import cs_pkg::*;

  localparam int WORDS = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, in_first = 1'b0;
  logic [ADDR_W-1:0] in_addr = '0;
  logic [NOUT-1:0] in_mask = '0;
  acc_t [NOUT-1:0] in_sums = '0;
  data_t bias = '0;
  logic mem_re, mem_we;
  logic [ADDR_W-1:0] mem_raddr, mem_waddr;
  acc_t [NOUT-1:0] mem_rdata, mem_wdata;
  logic [NOUT-1:0] mem_wmask;

  cs_accum u_dut (.*);
  tb_out_mem #(.DEPTH(64)) u_mem (
    .clk, .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata),
    .we(mem_we), .waddr(mem_waddr), .wmask(mem_wmask), .wdata(mem_wdata));

  int checks = 0, failures = 0;
  longint expv [WORDS][NOUT];

  initial begin
    for (int a = 0; a < WORDS; a++) for (int l = 0; l < NOUT; l++) expv[a][l] = 0;
    bias = data_t'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < 3; p++) begin
      for (int a = 0; a < WORDS; a++) begin
        in_valid = 1'b1;
        in_first = (p == 0);
        in_addr  = ADDR_W'(a);
        in_mask  = NOUT'($urandom);
        for (int l = 0; l < NOUT; l++) begin
          in_sums[l] = acc_t'($signed($urandom_range(200000)) - 100000);
          if (in_mask[l]) expv[a][l] = (p == 0 ? longint'(bias) : expv[a][l]) + longint'(in_sums[l]);
        end
        @(negedge clk);
        in_valid = 1'b0;
        if ($urandom_range(3) == 0) @(negedge clk);
      end
      repeat (3) @(negedge clk);
    end
    for (int a = 0; a < WORDS; a++)
      for (int l = 0; l < NOUT; l++) begin
        checks++;
        if (longint'(u_mem.get(a, l)) != expv[a][l]) begin
          failures++;
          if (failures < 10) $display("FAIL word %0d lane %0d: %0d exp %0d", a, l, u_mem.get(a, l), expv[a][l]);
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
