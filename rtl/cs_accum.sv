// cs_accum -- accumulates column convolution results into the output feature map.
//
// A k x k convolution is computed as k passes, one per filter column (and again
// per input channel). Every pass visits the output words in the same order, so a
// word is a running sum: on the first pass the accumulator starts from the bias B,
// on later passes from what the output memory holds. One output word holds the
// NOUT results of one column set.
//
// Interface and timing (read-modify-write, one set per cycle):
//   cycle t   : in_valid with addr/first/mask/sums -> mem_re, mem_raddr = in_addr
//   cycle t+1 : mem_rdata valid (1-cycle read latency) -> mem_we with
//               mem_wdata[l] = (first ? B : mem_rdata[l]) + sums[l] for lanes in
//               mem_wmask (lanes outside the output map are not written).
// A word is read again only in the next pass, long after its write, so there is
// no read-after-write hazard. The bias addition follows the paper; keeping the
// partial sums in an output memory is this design's choice.
module cs_accum
  import cs_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic [ADDR_W-1:0]       in_addr,
  input  logic [NOUT-1:0]         in_mask,
  input  acc_t [NOUT-1:0]         in_sums,
  input  data_t                   bias,
  output logic                    mem_re,
  output logic [ADDR_W-1:0]       mem_raddr,
  input  acc_t [NOUT-1:0]         mem_rdata,
  output logic                    mem_we,
  output logic [ADDR_W-1:0]       mem_waddr,
  output logic [NOUT-1:0]         mem_wmask,
  output acc_t [NOUT-1:0]         mem_wdata
);

  logic              s_valid, s_first;
  logic [ADDR_W-1:0] s_addr;
  logic [NOUT-1:0]   s_mask;
  acc_t [NOUT-1:0]   s_sums;

  assign mem_re    = in_valid && !in_first;
  assign mem_raddr = in_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid <= 1'b0;
      s_first <= 1'b0;
      s_addr  <= '0;
      s_mask  <= '0;
      s_sums  <= '0;
    end else begin
      s_valid <= in_valid;
      s_first <= in_first;
      s_addr  <= in_addr;
      s_mask  <= in_mask;
      s_sums  <= in_sums;
    end
  end

  always_comb begin
    mem_we    = s_valid;
    mem_waddr = s_addr;
    mem_wmask = s_mask;
    for (int l = 0; l < NOUT; l++)
      mem_wdata[l] = (s_first ? ACC_W'(bias) : mem_rdata[l]) + s_sums[l];
  end

endmodule
