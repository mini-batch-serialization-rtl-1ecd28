// wc_tile_ctrl -- sequencer of im2col GEMM tiles on the systolic array.
//
// A tile is an m x n block of the output matrix C, reduced over nwaves waves;
// wave w multiplies an m x k block of A with a k x n block of B (k = K_ROWS,
// n = N_COLS). Global-buffer layout expected (this design's choice, prepared
// by software together with the im2col rearrangement):
//   A block of wave w: a_base + w*m*WPRA, row-major, WPRA = k*16/256 words/row
//   B block of wave w: b_base + w*k*WPRB, row-major, WPRB = n*16/256 words/row
//   C tile           : c_base, m rows of WPRB words (fp16)
// Waves get a global number g; everything of wave g uses half g%2 of the A
// and B buffers and PE weight register g%2 (the select bit).
// Three engines run concurrently:
//   load : fills the free A and B halves for the next wave (both movers in
//          parallel) and records the wave's descriptor;
//   bfeed: shifts the wave's B block into the idle PE registers as soon as
//          the previous B feed is over (P_g >= P_{g-1} + k) and no A row of
//          wave g-2 can still need the old weights (P_g >= S_{g-2} + m + n - 2);
//   afeed: streams the wave's A rows once its weights are in place
//          (S_g >= P_g + k) and the previous wave has been streamed, and for
//          a tile's first wave claims an accumulation-buffer part.
// With m >= n + k - 2 (256 >= 254 at the defaults) the weight load of the
// next wave hides entirely behind the current one: waves follow each other
// with no idle cycle, the paper's gap-less waves. The scheduling rules are
// derived from the PE capture rule (see wc_pe); they are this design's.
// Counters: waves streamed, waves that started with no gap after the
// previous one, and A-feed stall cycles while a tile is in flight.
module wc_tile_ctrl
  import wc_fp_pkg::*;
  import wc_core_pkg::*;
#(
  parameter int unsigned K_ROWS = 128,
  parameter int unsigned N_COLS = 128,
  parameter int unsigned M_MAX  = 256,
  parameter int unsigned NBUF   = 3,
  localparam int unsigned WPRA  = K_ROWS * 16 / WORD_BITS,
  localparam int unsigned WPRB  = N_COLS * 16 / WORD_BITS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  tile_cmd_t   cmd,
  // A buffer
  output logic        a_fill_start,
  output logic        a_fill_half,
  output gb_addr_t    a_fill_base,
  output logic [15:0] a_fill_rows,
  input  logic        a_fill_busy,
  output logic        a_feed_start,
  output logic        a_feed_half,
  output logic [15:0] a_feed_m,
  output row_tag_t    a_feed_tag,
  // B buffer
  output logic        b_fill_start,
  output logic        b_fill_half,
  output gb_addr_t    b_fill_base,
  input  logic        b_fill_busy,
  output logic        b_feed_start,
  output logic        b_feed_half,
  // accumulation buffer
  output logic        alloc,
  output logic [1:0]  alloc_bank,
  output gb_addr_t    alloc_base,
  output logic [15:0] alloc_m,
  input  logic [NBUF-1:0] acc_busy,
  // status
  output logic        idle,
  output logic [31:0] n_waves,
  output logic [31:0] n_gapless,
  output logic [31:0] n_stall
);
  typedef struct packed {
    logic [15:0] m;
    logic        first;
    logic        last;
    logic [1:0]  bank;
    gb_addr_t    c_base;
  } wave_t;

  logic [31:0] now;

  // ---------------- load engine ----------------
  logic        tvalid;                 // a tile is being loaded
  tile_cmd_t   tc;
  logic [15:0] lw;                     // wave index inside the tile
  logic [1:0]  tbank;                  // accumulation part of this tile
  logic [31:0] gl;                     // global number of the wave being loaded
  logic        lbusy;                  // fills of wave gl in flight
  logic [1:0]  fills_seen;
  logic [1:0]  full_a, full_b;         // half holds a loaded, unconsumed block
  wave_t       desc [2];

  assign cmd_ready = !tvalid;

  logic lh;
  assign lh = gl[0];

  always_comb begin
    a_fill_start = tvalid && !lbusy && !full_a[lh] && !full_b[lh] && !a_fill_busy && !b_fill_busy;
    b_fill_start = a_fill_start;
    a_fill_half  = lh;
    b_fill_half  = lh;
    a_fill_base  = tc.a_base + gb_addr_t'(lw) * gb_addr_t'(tc.m) * gb_addr_t'(WPRA);
    a_fill_rows  = tc.m;
    b_fill_base  = tc.b_base + gb_addr_t'(lw) * gb_addr_t'(K_ROWS * WPRB);
  end

  // ---------------- feed engines ----------------
  logic [31:0] gb_n, ga_n;             // next wave to B-feed / A-feed
  logic [31:0] p_t [2];                // B feed start of the latest wave per parity
  logic [31:0] reg_free [2];           // earliest B feed start for a parity
  logic [31:0] bfree, afree;           // feeders free from
  logic [31:0] last_s_end;             // S + m of the previous wave
  logic        any_wave;
  logic        bh, ah;
  logic        b_go, a_go;
  wave_t       wa;

  assign bh = gb_n[0];
  assign ah = ga_n[0];
  assign wa = desc[ah];

  always_comb begin
    b_go = full_b[bh] && (gb_n < gl) && (gb_n <= ga_n + 32'd1) &&
           now >= bfree && now >= reg_free[bh];
    a_go = (ga_n < gb_n) && full_a[ah] && now >= p_t[ah] + 32'(K_ROWS) && now >= afree &&
           (!wa.first || !acc_busy[wa.bank]);
    b_feed_start = b_go;
    b_feed_half  = bh;
    a_feed_start = a_go;
    a_feed_half  = ah;
    a_feed_m     = wa.m;
    a_feed_tag   = '{valid: 1'b1, row: '0, first: wa.first, last: wa.last, bank: wa.bank};
    alloc        = a_go && wa.first;
    alloc_bank   = wa.bank;
    alloc_base   = wa.c_base;
    alloc_m      = wa.m;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      now <= '0;
      tvalid <= 1'b0; tc <= '0; lw <= '0; tbank <= '0; gl <= '0; lbusy <= 1'b0; fills_seen <= '0;
      full_a <= '0; full_b <= '0;
      desc[0] <= '0; desc[1] <= '0;
      gb_n <= '0; ga_n <= '0;
      p_t[0] <= '0; p_t[1] <= '0; reg_free[0] <= '0; reg_free[1] <= '0;
      bfree <= '0; afree <= '0; last_s_end <= '0; any_wave <= 1'b0;
      n_waves <= '0; n_gapless <= '0; n_stall <= '0;
    end else begin
      now <= now + 32'd1;
      // load engine
      if (!tvalid && cmd_valid && cmd.nwaves != 0 && cmd.m != 0) begin
        tvalid <= 1'b1;
        tc     <= cmd;
        lw     <= '0;
      end
      if (a_fill_start) begin
        lbusy <= 1'b1;
        fills_seen <= '0;
      end else if (lbusy) begin
        // movers report busy from the cycle after start
        fills_seen <= fills_seen + ((fills_seen != 2'd2) ? 2'd1 : 2'd0);
        if (fills_seen == 2'd2 && !a_fill_busy && !b_fill_busy) begin
          lbusy <= 1'b0;
          full_a[lh] <= 1'b1;
          full_b[lh] <= 1'b1;
          desc[lh] <= '{m: tc.m, first: (lw == 0), last: (lw + 16'd1 == tc.nwaves), bank: tbank, c_base: tc.c_base};
          gl <= gl + 32'd1;
          if (lw + 16'd1 == tc.nwaves) begin
            tvalid <= 1'b0;
            tbank  <= (int'(tbank) == NBUF - 1) ? '0 : tbank + 2'd1;
          end else begin
            lw <= lw + 16'd1;
          end
        end
      end
      // B feed
      if (b_go) begin
        p_t[bh] <= now;
        bfree   <= now + 32'(K_ROWS);
        gb_n    <= gb_n + 32'd1;
      end
      if (now + 32'd1 == bfree && gb_n != 0) full_b[~bh] <= 1'b0;   // half of wave gb_n-1 read out
      // A feed
      if (a_go) begin
        afree          <= now + 32'(wa.m);
        reg_free[ah]   <= now + 32'(wa.m) + 32'(N_COLS) - 32'd2;
        last_s_end     <= now + 32'(wa.m);
        any_wave       <= 1'b1;
        ga_n           <= ga_n + 32'd1;
        n_waves        <= n_waves + 32'd1;
        if (any_wave && now == last_s_end) n_gapless <= n_gapless + 32'd1;
      end
      if (now + 32'd1 == afree && ga_n != 0) full_a[~ah] <= 1'b0;
      if (!a_go && now >= afree && (tvalid || ga_n != gl)) n_stall <= n_stall + 32'd1;
    end
  end

  // a tile must fit one accumulation-buffer part and the A half-buffer
  always_ff @(posedge clk)
    if (rst_n && cmd_valid && cmd_ready)
      assert (cmd.m <= 16'(M_MAX)) else $error("tile height %0d exceeds M_MAX", cmd.m);

  assign idle = !tvalid && (ga_n == gl) && (acc_busy == '0) && now >= afree;
endmodule
