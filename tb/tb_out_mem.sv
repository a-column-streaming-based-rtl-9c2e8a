// tb_out_mem -- behavioural model of the output memory written by the engine.
//
// DEPTH words of NOUT lanes of ACC_W bits. Reads return in the next cycle; writes
// store the lanes whose mask bit is set. All words start at zero.
module tb_out_mem
  import cs_pkg::*;
#(
  parameter int DEPTH = 8192
) (
  input  logic              clk,
  input  logic              re,
  input  logic [ADDR_W-1:0] raddr,
  output acc_t [NOUT-1:0]   rdata,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [NOUT-1:0]   wmask,
  input  acc_t [NOUT-1:0]   wdata
);

  acc_t mem [DEPTH][NOUT];

  function automatic acc_t get(int addr, int lane);
    return mem[addr][lane];
  endfunction

  initial begin
    for (int a = 0; a < DEPTH; a++)
      for (int l = 0; l < NOUT; l++)
        mem[a][l] = '0;
    rdata = '0;
  end

  always_ff @(posedge clk) begin
    if (re && int'(raddr) < DEPTH)
      for (int l = 0; l < NOUT; l++) rdata[l] <= mem[raddr][l];
    if (we && int'(waddr) < DEPTH)
      for (int l = 0; l < NOUT; l++)
        if (wmask[l]) mem[waddr][l] <= wdata[l];
  end

endmodule
