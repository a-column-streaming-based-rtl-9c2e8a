// cs_ctrl -- pass sequencer of the column streaming convolution engine.
//
// A run computes one output channel of a stride-1 k x k convolution of an
// n x n image with nch input channels; the output map is m x m, m = n - k + 1.
// The run is split into passes, one per (input channel ch, filter column j).
// Each pass:
//   LOADW  - one cycle: every PE latches its element of filter column j of
//            channel ch (the paper's "a column of the filters' values will only
//            be updated after a layer of feature is computed and streamed out");
//   STREAM - one column set per cycle: for output column mo = 0..m-1 it reads
//            image column mo+j in segments starting at rows rb = 0, ops, 2*ops, ..
//            while rb < m, where ops is the mapping's outputs per set;
//   DRAIN  - DRAIN_CYC idle cycles until the last set has left the array and its
//            results are written, so the next column's weights cannot meet it.
// Narrow mappings (k <= 5) take the first pixels of a set's second half from the
// following set. When that following set would lie in the next image column but
// the current column still has the pixels (n >= rb+2 after the last set), one
// extra "tail" set of the same column is read; it produces no outputs.
//
// Every read carries a set_meta_t (valid, out, first pass, output word address,
// lane mask) which the engine delays to the accumulator. Output word addresses
// count the output sets of a pass from 0, so output (row r, column mo) is lane
// r % ops of word mo * ceil(m/ops) + r / ops.
//
// start is accepted in IDLE. Invalid sizes (k outside 3..11, n < k, n > N_MAX,
// nch = 0 or > MAX_CH) end the run at once with err and done. done pulses one
// cycle when the run ends. The pass order, the drain and the tail set are this
// design's choices; the one-set-per-cycle streaming follows the paper.
module cs_ctrl
  import cs_pkg::*;
#(
  parameter int N_MAX  = 227,
  parameter int MAX_CH = 3
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [K_W-1:0]     k,
  input  logic [COORD_W-1:0] n,
  input  logic [CH_W-1:0]    nch,
  // mapping of the latched k (from cs_mapper)
  input  logic [OPS_W-1:0]   ops,
  input  logic               wide,
  // latched run parameters
  output logic [K_W-1:0]     k_q,
  output logic [COORD_W-1:0] n_q,
  // status
  output logic               busy,
  output logic               done,
  output logic               err,
  // weight preload
  output logic               wload,
  output logic [CH_W-1:0]    w_ch,
  output logic [WIDX_W-1:0]  w_col,
  // feature memory read
  output logic               fr_en,
  output logic [CH_W-1:0]    fr_ch,
  output logic [COORD_W-1:0] fr_col,
  output logic [COORD_W-1:0] fr_row,
  output set_meta_t          meta
);

  typedef enum logic [1:0] {S_IDLE, S_LOADW, S_STREAM, S_DRAIN} state_e;

  state_e             state;
  logic [CH_W-1:0]    nch_q, ch;
  logic [WIDX_W-1:0]  j;
  logic [COORD_W-1:0] m_q, mo, rb;
  logic               tail;
  logic [ADDR_W-1:0]  addr;
  logic [4:0]         dcnt;

  wire [COORD_W:0] rb_next = {1'b0, rb} + (COORD_W+1)'(ops);

  // ---------------- outputs of the STREAM state ----------------
  always_comb begin
    fr_en      = (state == S_STREAM);
    fr_ch      = ch;
    fr_col     = mo + COORD_W'(j);
    fr_row     = rb;
    meta       = '0;
    meta.valid = fr_en;
    meta.out   = fr_en && !tail;
    meta.first = (ch == '0) && (j == '0);
    meta.addr  = addr;
    for (int l = 0; l < NOUT; l++)
      meta.mask[l] = meta.out && (l < int'(ops)) && (int'(rb) + l < int'(m_q));
    wload = (state == S_LOADW);
    w_ch  = ch;
    w_col = j;
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      k_q   <= '0;
      n_q   <= '0;
      nch_q <= '0;
      m_q   <= '0;
      ch    <= '0;
      j     <= '0;
      mo    <= '0;
      rb    <= '0;
      tail  <= 1'b0;
      addr  <= '0;
      dcnt  <= '0;
      done  <= 1'b0;
      err   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          k_q   <= k;
          n_q   <= n;
          nch_q <= nch;
          m_q   <= n - COORD_W'(k) + 1'b1;
          ch    <= '0;
          j     <= '0;
          if (int'(k) < KMIN || int'(k) > KMAX || int'(n) < int'(k) || int'(n) > N_MAX ||
              nch == '0 || int'(nch) > MAX_CH) begin
            err  <= 1'b1;
            done <= 1'b1;
          end else begin
            err   <= 1'b0;
            state <= S_LOADW;
          end
        end
        S_LOADW: begin
          mo    <= '0;
          rb    <= '0;
          tail  <= 1'b0;
          addr  <= '0;
          state <= S_STREAM;
        end
        S_STREAM: begin
          if (!tail) addr <= addr + 1'b1;
          if (!tail && rb_next < {1'b0, m_q}) begin
            rb <= rb_next[COORD_W-1:0];
          end else if (!tail && !wide && rb_next + 2 <= {1'b0, n_q}) begin
            rb   <= rb_next[COORD_W-1:0];
            tail <= 1'b1;
          end else begin
            rb   <= '0;
            tail <= 1'b0;
            if (mo == m_q - 1'b1) begin
              dcnt  <= '0;
              state <= S_DRAIN;
            end else begin
              mo <= mo + 1'b1;
            end
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (int'(dcnt) == DRAIN_CYC - 1) begin
            if (int'(j) + 1 < int'(k_q)) begin
              j     <= j + 1'b1;
              state <= S_LOADW;
            end else if (ch + 1'b1 < nch_q) begin
              ch    <= ch + 1'b1;
              j     <= '0;
              state <= S_LOADW;
            end else begin
              done  <= 1'b1;
              state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
