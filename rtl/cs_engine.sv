// cs_engine -- column streaming-based convolution engine (top level).
//
// Computes one output channel of a stride-1 k x k convolution (k = 3..11) of an
// n x n, nch-channel feature map, plus bias. The filter is decomposed into its
// columns; for each filter column the image columns are streamed through an
// 11 x 11 PE array, one column set per clock, and the 1-D column results are
// accumulated into the output map in an external output memory.
//
//   cs_ctrl          passes (channel x filter column), reads, weight preload
//   cs_filter_buf    the k x k filters and the bias, written by a host
//   cs_mapper        array configuration for the latched k
//   cs_col_streamer  feature segments -> bus 1 / bus 2
//   cs_pe_array      11 x 11 PEs with diagonal streaming and programmable wires
//   cs_reduce        column alignment and per-output adders
//   cs_accum         bias and accumulation over passes (read-modify-write)
//
// External memories (ports of this module):
//   feature memory: fr_en/fr_ch/fr_col/fr_row request in cycle i, fr_data
//     = pixels (fr_row .. fr_row+20) of column fr_col, channel fr_ch, in cycle
//     i+1 (values below the image are ignored);
//   output memory: om_re/om_raddr read with 1-cycle latency into om_rdata;
//     om_we/om_waddr/om_wmask/om_wdata write NOUT lanes of ACC_W bits. Output
//     pixel (row r, column mo) ends in lane r % ops of word mo*ceil(m/ops) + r/ops,
//     with ops = 20 for k <= 5 and 22-k for k >= 6.
// Host: write filters (fw_*) and bias, then pulse start with k, n, nch; done
// pulses when the output memory holds the result. A set read in cycle i has its
// results written in cycle i + LAT_SUMS + 1. The composition follows the paper's
// Fig. 5; the memory interfaces are this design's choices.
module cs_engine
  import cs_pkg::*;
#(
  parameter int N_MAX  = 227,
  parameter int MAX_CH = 3
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // run control
  input  logic                   start,
  input  logic [K_W-1:0]         k,
  input  logic [COORD_W-1:0]     n,
  input  logic [CH_W-1:0]        nch,
  output logic                   busy,
  output logic                   done,
  output logic                   err,
  // filter and bias write port
  input  logic                   fw_en,
  input  logic [CH_W-1:0]        fw_ch,
  input  logic [WIDX_W-1:0]      fw_row,
  input  logic [WIDX_W-1:0]      fw_col,
  input  data_t                  fw_data,
  input  logic                   bias_we,
  input  data_t                  bias_data,
  // feature memory read port
  output logic                   fr_en,
  output logic [CH_W-1:0]        fr_ch,
  output logic [COORD_W-1:0]     fr_col,
  output logic [COORD_W-1:0]     fr_row,
  input  data_t [SEG-1:0]        fr_data,
  // output memory ports
  output logic                   om_re,
  output logic [ADDR_W-1:0]      om_raddr,
  input  acc_t  [NOUT-1:0]       om_rdata,
  output logic                   om_we,
  output logic [ADDR_W-1:0]      om_waddr,
  output logic [NOUT-1:0]        om_wmask,
  output acc_t  [NOUT-1:0]       om_wdata
);

  logic [K_W-1:0]     k_q;
  logic [COORD_W-1:0] n_q;
  map_cfg_t           cfg;
  logic               k_ok;
  logic               wload;
  logic [CH_W-1:0]    w_ch;
  logic [WIDX_W-1:0]  w_col;
  data_t [KMAX-1:0]   wcol;
  data_t              bias;
  set_meta_t          meta;
  data_t [ROWS-1:0]   bus1, bus2;
  prod_t [ROWS-1:0][COLS-1:0] prod;
  acc_t  [NOUT-1:0]   sums;

  cs_ctrl #(.N_MAX(N_MAX), .MAX_CH(MAX_CH)) u_ctrl (
    .clk, .rst_n, .start, .k, .n, .nch,
    .ops(cfg.ops), .wide(cfg.wide),
    .k_q, .n_q, .busy, .done, .err,
    .wload, .w_ch, .w_col,
    .fr_en, .fr_ch, .fr_col, .fr_row, .meta
  );

  cs_filter_buf #(.MAX_CH(MAX_CH)) u_filt (
    .clk, .rst_n,
    .we(fw_en), .wch(fw_ch), .wrow(fw_row), .wcolidx(fw_col), .wdata(fw_data),
    .bias_we, .bias_wdata(bias_data),
    .rch(w_ch), .rcol(w_col), .col_out(wcol), .bias
  );

  cs_mapper u_map (.k(k_q), .cfg, .k_ok);

  cs_col_streamer u_strm (
    .clk, .rst_n, .rd_en(fr_en), .rd_row(fr_row), .n(n_q), .wide(cfg.wide),
    .pix(fr_data), .bus1, .bus2
  );

  cs_pe_array u_array (
    .clk, .rst_n, .bus1, .bus2, .cfg, .wload, .wcol, .feat(), .prod
  );

  cs_reduce u_red (.clk, .rst_n, .prod, .cfg, .k(k_q), .sums);

  // Set bookkeeping delayed from the read to the reduction output.
  set_meta_t [LAT_SUMS-1:0] meta_pipe;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta_pipe <= '0;
    end else begin
      meta_pipe[0] <= meta;
      for (int i = 1; i < LAT_SUMS; i++)
        meta_pipe[i] <= meta_pipe[i-1];
    end
  end

  cs_accum u_acc (
    .clk, .rst_n,
    .in_valid(meta_pipe[LAT_SUMS-1].out),
    .in_first(meta_pipe[LAT_SUMS-1].first),
    .in_addr (meta_pipe[LAT_SUMS-1].addr),
    .in_mask (meta_pipe[LAT_SUMS-1].mask),
    .in_sums (sums),
    .bias,
    .mem_re(om_re), .mem_raddr(om_raddr), .mem_rdata(om_rdata),
    .mem_we(om_we), .mem_waddr(om_waddr), .mem_wmask(om_wmask), .mem_wdata(om_wdata)
  );

  // k was range-checked by the controller before the mapping is used.
  a_k_ok: assert property (@(posedge clk) wload |-> k_ok)
    else $error("cs_engine: weight load with unsupported k");

endmodule
