// wc_accum_buffer -- triple-buffered output accumulation buffer.
//
// NBUF parts (3 in the paper), each holding a whole C tile of M_MAX x N_COLS
// fp32 partial sums (256 x 128 x 32b = 128 KiB per part at the defaults).
// Below every array column sits an fp32 adder: the first wave of a tile
// writes the column result into its row, later waves add to it, which is the
// reduction across the ceil(K/k) waves of a tile.
// Each result is matched with its row tag: the tag that left the A buffer
// together with array row 0 is delayed K_ROWS cycles (the depth of the
// array) and then one more cycle per column, exactly like the data.
// When the last row of the last wave leaves the last column, the part is
// queued for draining: a wc_block_mover with WP ports quantises each row to
// fp16 (round to nearest even) and writes it to the global buffer at
// c_base + row*WPR + word, while the other parts keep accumulating.
// alloc (from the tile controller, before the tile's first wave) claims a
// part and gives its c_base and height; busy[b] stays high until the part has
// been drained. Re-reading earlier partial sums into the third part is not
// built (tiles start from their first wave).
module wc_accum_buffer
  import wc_fp_pkg::*;
  import wc_core_pkg::*;
#(
  parameter int unsigned N_COLS = 128,
  parameter int unsigned K_ROWS = 128,
  parameter int unsigned M_MAX  = 256,
  parameter int unsigned NBUF   = 3,
  parameter int unsigned WP     = 4,
  localparam int unsigned WPR   = N_COLS * 16 / WORD_BITS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  fp32_t       p_bottom [N_COLS],
  input  row_tag_t    tag_in,
  input  logic        alloc,
  input  logic [1:0]  alloc_bank,
  input  gb_addr_t    alloc_base,
  input  logic [15:0] alloc_m,
  output logic [NBUF-1:0] busy,
  output gb_req_t     preq [WP],
  input  gb_rsp_t     prsp [WP],
  output logic        tile_done    // pulse: a part finished draining
);
  localparam int unsigned MW = $clog2(M_MAX);

  fp32_t       acc [NBUF][M_MAX][N_COLS];
  gb_addr_t    base_b [NBUF];
  logic [15:0] m_b    [NBUF];
  logic [NBUF-1:0] full;           // accumulated, waiting for drain

  // tag alignment
  row_tag_t dly [K_ROWS];
  row_tag_t tcol [N_COLS];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < K_ROWS; i++) dly[i] <= '0;
      for (int c = 1; c < N_COLS; c++) tcol[c] <= '0;
    end else begin
      dly[0] <= tag_in;
      for (int i = 1; i < K_ROWS; i++) dly[i] <= dly[i-1];
      for (int c = 1; c < N_COLS; c++) tcol[c] <= tcol[c-1];
    end
  end
  assign tcol[0] = dly[K_ROWS-1];

  // per-column accumulate
  always_ff @(posedge clk)
    for (int c = 0; c < N_COLS; c++)
      if (tcol[c].valid)
        acc[tcol[c].bank][tcol[c].row[MW-1:0]][c] <=
          tcol[c].first ? p_bottom[c] : fp32_add(acc[tcol[c].bank][tcol[c].row[MW-1:0]][c], p_bottom[c]);

  // drain
  logic        dstart, dbusy, dact;
  logic [1:0]  dbank;
  logic [15:0] cur_row, cur_grp;
  word_t       wdata [WP];
  logic        rd_en  [WP];
  logic [15:0] rd_row [WP];
  logic [15:0] rd_word[WP];
  word_t       rd_data[WP];

  assign dstart = !dact && full[dbank];

  wc_block_mover #(.P(WP), .WPR(WPR)) u_drain (
    .clk, .rst_n, .start(dstart), .is_write(1'b1), .base(base_b[dbank]), .nrows(m_b[dbank]),
    .busy(dbusy), .preq, .prsp, .cur_row, .cur_grp, .wdata, .rd_en, .rd_row, .rd_word, .rd_data);

  always_comb
    for (int p = 0; p < WP; p++)
      for (int l = 0; l < LANES; l++)
        wdata[p][l*16 +: 16] = fp32_to_fp16(acc[dbank][cur_row[MW-1:0]][(int'(cur_grp) * WP + p) * LANES + l]);

  logic tile_last;
  assign tile_last = tcol[N_COLS-1].valid && tcol[N_COLS-1].last &&
                     tcol[N_COLS-1].row + 16'd1 == m_b[tcol[N_COLS-1].bank];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= '0;
      full  <= '0;
      dact  <= 1'b0;
      dbank <= '0;
      tile_done <= 1'b0;
      for (int b = 0; b < NBUF; b++) begin base_b[b] <= '0; m_b[b] <= '0; end
    end else begin
      tile_done <= 1'b0;
      if (alloc) begin
        busy[alloc_bank]   <= 1'b1;
        base_b[alloc_bank] <= alloc_base;
        m_b[alloc_bank]    <= alloc_m;
      end
      if (tile_last) full[tcol[N_COLS-1].bank] <= 1'b1;
      if (dstart) dact <= 1'b1;
      else if (dact && !dbusy) begin
        dact        <= 1'b0;
        full[dbank] <= 1'b0;
        busy[dbank] <= 1'b0;
        tile_done   <= 1'b1;
        dbank       <= (int'(dbank) == NBUF - 1) ? '0 : dbank + 2'd1;
      end
    end
  end

  logic unused_rd;
  always_comb begin
    unused_rd = 1'b0;
    for (int p = 0; p < WP; p++) unused_rd ^= rd_en[p] ^ (^rd_row[p]) ^ (^rd_word[p]) ^ (^rd_data[p]);
    unused_rd ^= ^cur_row;
  end
endmodule
