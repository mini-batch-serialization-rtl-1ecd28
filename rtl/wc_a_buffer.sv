// wc_a_buffer -- double-buffered A local buffer with skewed row feed.
//
// Holds two halves of M_MAX rows x K_ROWS fp16 (an A block: m rows of the
// im2col input matrix, k = K_ROWS columns). With the defaults a half is
// 256 x 128 x 16b = 64 KiB, the paper's size; m = half size / k. One half is
// filled from the global buffer by the built-in wc_block_mover (LP ports, one
// A row per cycle when there are no bank conflicts) while the other streams
// into the systolic array.
// Feed: a pulse on feed_start (with half, m, register select and the row tag
// fields) streams rows 0..m-1 on consecutive cycles. With feed_start high in
// cycle S, row i is read in cycle S+1+i and element r of it appears on
// a_edge[r] in cycle S+2+i+r (row r of the array is delayed r cycles by skew
// registers, which produces the staircase the array needs). tag_out carries
// the row tag aligned with a_edge[0]. Idle edges carry value 0 (a skipped
// MAC) with the select of the last feed.
module wc_a_buffer
  import wc_fp_pkg::*;
  import wc_core_pkg::*;
#(
  parameter int unsigned K_ROWS = 128,
  parameter int unsigned M_MAX  = 256,
  localparam int unsigned WPR   = K_ROWS * 16 / WORD_BITS,
  localparam int unsigned LP    = WPR
) (
  input  logic        clk,
  input  logic        rst_n,
  // fill
  input  logic        fill_start,
  input  logic        fill_half,
  input  gb_addr_t    fill_base,
  input  logic [15:0] fill_rows,
  output logic        fill_busy,
  output gb_req_t     preq [LP],
  input  gb_rsp_t     prsp [LP],
  // feed
  input  logic        feed_start,
  input  logic        feed_half,
  input  logic [15:0] feed_m,
  input  logic        feed_sel,
  input  row_tag_t    feed_tag,     // first/last/bank used, row filled in here
  output logic        feed_busy,
  output tagged16_t   a_edge [K_ROWS],
  output row_tag_t    tag_out
);
  typedef logic [K_ROWS*16-1:0] arow_t;
  arow_t mem [2][M_MAX];
  logic  fh_q;

  logic        rd_en  [LP];
  logic [15:0] rd_row [LP];
  logic [15:0] rd_word[LP];
  word_t       rd_data[LP];
  word_t       wd_unused [LP];
  logic [15:0] cur_row, cur_grp;

  always_comb for (int p = 0; p < LP; p++) wd_unused[p] = '0;

  wc_block_mover #(.P(LP), .WPR(WPR)) u_fill (
    .clk, .rst_n, .start(fill_start), .is_write(1'b0), .base(fill_base), .nrows(fill_rows),
    .busy(fill_busy), .preq, .prsp, .cur_row, .cur_grp, .wdata(wd_unused),
    .rd_en, .rd_row, .rd_word, .rd_data);

  always_ff @(posedge clk) begin
    if (fill_start && !fill_busy) fh_q <= fill_half;
    for (int p = 0; p < LP; p++)
      if (rd_en[p]) mem[fh_q][rd_row[p][$clog2(M_MAX)-1:0]][rd_word[p]*WORD_BITS +: WORD_BITS] <= rd_data[p];
  end

  // feed sequencer
  logic        act, half_q, sel_q;
  logic [15:0] idx, m_q;
  row_tag_t    tag_q, stage_tag;
  tagged16_t   stage [K_ROWS];

  assign feed_busy = act;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      act   <= 1'b0;
      idx   <= '0;
      m_q   <= '0;
      half_q<= 1'b0;
      sel_q <= 1'b0;
      tag_q <= '0;
      stage_tag <= '0;
      for (int r = 0; r < K_ROWS; r++) stage[r] <= '{sel: 1'b0, val: '0};
    end else begin
      stage_tag <= '0;
      for (int r = 0; r < K_ROWS; r++) stage[r] <= '{sel: sel_q, val: '0};
      if (act) begin
        for (int r = 0; r < K_ROWS; r++)
          stage[r] <= '{sel: sel_q, val: mem[half_q][idx[$clog2(M_MAX)-1:0]][r*16 +: 16]};
        stage_tag <= '{valid: 1'b1, row: idx, first: tag_q.first, last: tag_q.last, bank: tag_q.bank};
        // (valid and row of the incoming tag are replaced here)
        idx <= idx + 16'd1;
        if (idx + 16'd1 == m_q) act <= 1'b0;
      end
      // a new feed may start in the cycle the previous one reads its last row
      if (feed_start && (!act || idx + 16'd1 == m_q) && feed_m != 0) begin
        act    <= 1'b1;
        idx    <= '0;
        m_q    <= feed_m;
        half_q <= feed_half;
        sel_q  <= feed_sel;
        tag_q  <= feed_tag;
      end
    end
  end

  // skew: row r delayed by r cycles
  for (genvar r = 0; r < K_ROWS; r++) begin : g_skew
    if (r == 0) begin : g_r0
      assign a_edge[0] = stage[0];
    end else begin : g_rn
      tagged16_t sk [r];
      always_ff @(posedge clk) begin
        sk[0] <= stage[r];
        for (int j = 1; j < r; j++) sk[j] <= sk[j-1];
      end
      assign a_edge[r] = sk[r-1];
    end
  end
  assign tag_out = stage_tag;

  logic unused_ok;
  assign unused_ok = ^{cur_row, cur_grp, tag_q.valid, tag_q.row};
endmodule
