// wc_b_buffer -- double-buffered B local buffer feeding the PE weight path.
//
// Holds two halves of K_ROWS x N_COLS fp16 (a B block, one weight per PE;
// 128 x 128 x 16b = 32 KiB per half with the defaults, as in the paper). A
// half is filled from the global buffer by a wc_block_mover with LP ports
// (half a B row per cycle at the default) while the other half is shifted
// into the array. Feed: a pulse on feed_start (cycle P) sends rows
// 0..K_ROWS-1 of the chosen half on consecutive cycles, row j on all
// w_edge[c] in cycle P+2+j, tagged with the register select of the wave. Between
// feeds the edge carries the select of the last feed (reset: 1), which no PE
// captures (see wc_pe).
module wc_b_buffer
  import wc_fp_pkg::*;
  import wc_core_pkg::*;
#(
  parameter int unsigned K_ROWS = 128,
  parameter int unsigned N_COLS = 128,
  localparam int unsigned WPR   = N_COLS * 16 / WORD_BITS,
  localparam int unsigned LP    = (WPR >= 4) ? WPR / 2 : WPR
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        fill_start,
  input  logic        fill_half,
  input  gb_addr_t    fill_base,
  output logic        fill_busy,
  output gb_req_t     preq [LP],
  input  gb_rsp_t     prsp [LP],
  input  logic        feed_start,
  input  logic        feed_half,
  input  logic        feed_sel,
  output logic        feed_busy,
  output tagged16_t   w_edge [N_COLS]
);
  typedef logic [N_COLS*16-1:0] brow_t;
  brow_t mem [2][K_ROWS];
  logic  fh_q;

  logic        rd_en  [LP];
  logic [15:0] rd_row [LP];
  logic [15:0] rd_word[LP];
  word_t       rd_data[LP];
  word_t       wd_unused [LP];
  logic [15:0] cur_row, cur_grp;

  always_comb for (int p = 0; p < LP; p++) wd_unused[p] = '0;

  wc_block_mover #(.P(LP), .WPR(WPR)) u_fill (
    .clk, .rst_n, .start(fill_start), .is_write(1'b0), .base(fill_base), .nrows(16'(K_ROWS)),
    .busy(fill_busy), .preq, .prsp, .cur_row, .cur_grp, .wdata(wd_unused),
    .rd_en, .rd_row, .rd_word, .rd_data);

  always_ff @(posedge clk) begin
    if (fill_start && !fill_busy) fh_q <= fill_half;
    for (int p = 0; p < LP; p++)
      if (rd_en[p]) mem[fh_q][rd_row[p][$clog2(K_ROWS)-1:0]][rd_word[p]*WORD_BITS +: WORD_BITS] <= rd_data[p];
  end

  logic        act, half_q, sel_q;
  logic [15:0] idx;

  assign feed_busy = act;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      act    <= 1'b0;
      idx    <= '0;
      half_q <= 1'b0;
      sel_q  <= 1'b1;
      for (int c = 0; c < N_COLS; c++) w_edge[c] <= '{sel: 1'b1, val: '0};
    end else begin
      for (int c = 0; c < N_COLS; c++) w_edge[c] <= '{sel: sel_q, val: '0};
      if (act) begin
        for (int c = 0; c < N_COLS; c++)
          w_edge[c] <= '{sel: sel_q, val: mem[half_q][idx[$clog2(K_ROWS)-1:0]][c*16 +: 16]};
        idx <= idx + 16'd1;
        if (int'(idx) == K_ROWS - 1) act <= 1'b0;
      end
      // a new feed may start in the cycle the previous one sends its last row
      if (feed_start && (!act || int'(idx) == K_ROWS - 1)) begin
        act    <= 1'b1;
        idx    <= '0;
        half_q <= feed_half;
        sel_q  <= feed_sel;
      end
    end
  end

  logic unused_ok;
  assign unused_ok = ^{cur_row, cur_grp};
endmodule
