// wavecore_core -- one core of the WaveCore CNN training accelerator.
//
// A K_ROWS x N_COLS (128 x 128) weight-stationary systolic array with
// double-buffered weights in every PE computes im2col convolutions and
// fully-connected layers as tiled GEMMs. Around it: a double-buffered A local
// buffer (64 KiB halves), a double-buffered B local buffer (32 KiB halves), a
// triple-buffered fp32 accumulation buffer (128 KiB parts) with fp16 output,
// the tile controller that keeps waves flowing without gaps, a 32-bank 10 MiB
// global buffer behind a 24-port crossbar with load coalescing, and a vector
// unit for activation, pooling and normalisation work. This block structure
// follows the paper's per-core diagram; sizes are the paper's.
//
// Crossbar port map (this design's choice): 0-3 memory controllers (brought
// out as mc_req/mc_rsp; the HBM2 controllers are outside this RTL), then the
// A-buffer fill ports, the B-buffer fill ports, the accumulation-buffer drain
// ports and the two vector-unit ports; the remaining ports stay idle.
//
// Use: load operands into the global buffer through the mc ports, issue
// tile commands (tile_cmd, valid/ready) and vector commands (vec_cmd,
// valid/ready), wait for tile_idle / !vec_busy, read results through the
// mc ports. See wc_tile_ctrl for the operand layout.
module wavecore_core
  import wc_fp_pkg::*;
  import wc_core_pkg::*;
#(
  parameter int unsigned K_ROWS        = 128,
  parameter int unsigned N_COLS        = 128,
  parameter int unsigned M_MAX         = 256,
  parameter int unsigned GB_BANKS      = 32,
  parameter int unsigned GB_BANK_WORDS = 10240,
  parameter int unsigned XBAR_PORTS    = 24,
  localparam int unsigned NMC          = 4,
  localparam int unsigned WPRA         = K_ROWS * 16 / WORD_BITS,
  localparam int unsigned WPRB         = N_COLS * 16 / WORD_BITS,
  localparam int unsigned A_P          = WPRA,
  localparam int unsigned B_P          = (WPRB >= 4) ? WPRB / 2 : WPRB,
  localparam int unsigned D_P          = (WPRB >= 4) ? 4 : WPRB,
  localparam int unsigned A_0          = NMC,
  localparam int unsigned B_0          = A_0 + A_P,
  localparam int unsigned D_0          = B_0 + B_P,
  localparam int unsigned V_0          = D_0 + D_P,
  localparam int unsigned USED         = V_0 + 2,
  localparam int unsigned BAW          = $clog2(GB_BANK_WORDS)
) (
  input  logic        clk,
  input  logic        rst_n,
  // tile (GEMM) commands
  input  logic        tile_valid,
  output logic        tile_ready,
  input  tile_cmd_t   tile_cmd,
  output logic        tile_idle,
  // vector commands
  input  logic        vec_valid,
  output logic        vec_ready,
  input  vec_cmd_t    vec_cmd,
  output logic        vec_busy,
  output fp32_t       vec_sum,
  output fp32_t       vec_sumsq,
  // memory-controller side of the crossbar
  input  gb_req_t     mc_req [NMC],
  output gb_rsp_t     mc_rsp [NMC],
  // observation counters
  output logic [31:0] cnt_waves,
  output logic [31:0] cnt_gapless,
  output logic [31:0] cnt_stall,
  output logic [31:0] cnt_coalesced,
  output logic [31:0] cnt_conflicts,
  output logic [31:0] cnt_tiles
);
  // ---------------- crossbar + global buffer ----------------
  gb_req_t preq [XBAR_PORTS];
  gb_rsp_t prsp [XBAR_PORTS];
  logic           b_en   [GB_BANKS];
  logic           b_we   [GB_BANKS];
  logic [BAW-1:0] b_addr [GB_BANKS];
  word_t          b_wdata[GB_BANKS];
  word_t          b_rdata[GB_BANKS];
  logic [7:0]     n_coal, n_confl;

  wc_crossbar #(.NPORTS(XBAR_PORTS), .NBANKS(GB_BANKS), .BANK_WORDS(GB_BANK_WORDS)) u_xbar (
    .clk, .rst_n, .preq, .prsp, .b_en, .b_we, .b_addr, .b_wdata, .b_rdata,
    .n_coalesced(n_coal), .n_conflicts(n_confl));

  wc_global_buffer #(.NBANKS(GB_BANKS), .BANK_WORDS(GB_BANK_WORDS)) u_gbuf (
    .clk, .en(b_en), .we(b_we), .addr(b_addr), .wdata(b_wdata), .rdata(b_rdata));

  gb_req_t a_req [A_P];  gb_rsp_t a_rsp [A_P];
  gb_req_t b_req [B_P];  gb_rsp_t b_rsp [B_P];
  gb_req_t d_req [D_P];  gb_rsp_t d_rsp [D_P];
  gb_req_t v_req [2];    gb_rsp_t v_rsp [2];

  always_comb begin
    for (int p = 0; p < XBAR_PORTS; p++) preq[p] = GB_REQ_IDLE;
    for (int p = 0; p < NMC; p++) begin preq[p] = mc_req[p]; mc_rsp[p] = prsp[p]; end
    for (int p = 0; p < A_P; p++) begin preq[A_0 + p] = a_req[p]; a_rsp[p] = prsp[A_0 + p]; end
    for (int p = 0; p < B_P; p++) begin preq[B_0 + p] = b_req[p]; b_rsp[p] = prsp[B_0 + p]; end
    for (int p = 0; p < D_P; p++) begin preq[D_0 + p] = d_req[p]; d_rsp[p] = prsp[D_0 + p]; end
    for (int p = 0; p < 2; p++)   begin preq[V_0 + p] = v_req[p]; v_rsp[p] = prsp[V_0 + p]; end
  end

  // ---------------- tile controller and local buffers ----------------
  logic        a_fill_start, a_fill_half, a_fill_busy, a_feed_start, a_feed_half, a_feed_busy;
  gb_addr_t    a_fill_base;
  logic [15:0] a_fill_rows, a_feed_m;
  row_tag_t    a_feed_tag, row_tag;
  logic        b_fill_start, b_fill_half, b_fill_busy, b_feed_start, b_feed_half, b_feed_busy;
  gb_addr_t    b_fill_base;
  logic        alloc;
  logic [1:0]  alloc_bank;
  gb_addr_t    alloc_base;
  logic [15:0] alloc_m;
  logic [2:0]  acc_busy;
  logic        tile_done;

  wc_tile_ctrl #(.K_ROWS(K_ROWS), .N_COLS(N_COLS), .M_MAX(M_MAX), .NBUF(3)) u_ctrl (
    .clk, .rst_n, .cmd_valid(tile_valid), .cmd_ready(tile_ready), .cmd(tile_cmd),
    .a_fill_start, .a_fill_half, .a_fill_base, .a_fill_rows, .a_fill_busy,
    .a_feed_start, .a_feed_half, .a_feed_m, .a_feed_tag,
    .b_fill_start, .b_fill_half, .b_fill_base, .b_fill_busy, .b_feed_start, .b_feed_half,
    .alloc, .alloc_bank, .alloc_base, .alloc_m, .acc_busy,
    .idle(tile_idle), .n_waves(cnt_waves), .n_gapless(cnt_gapless), .n_stall(cnt_stall));

  tagged16_t a_edge [K_ROWS];
  tagged16_t w_edge [N_COLS];
  fp32_t     p_bottom [N_COLS];

  wc_a_buffer #(.K_ROWS(K_ROWS), .M_MAX(M_MAX)) u_abuf (
    .clk, .rst_n, .fill_start(a_fill_start), .fill_half(a_fill_half), .fill_base(a_fill_base),
    .fill_rows(a_fill_rows), .fill_busy(a_fill_busy), .preq(a_req), .prsp(a_rsp),
    .feed_start(a_feed_start), .feed_half(a_feed_half), .feed_m(a_feed_m), .feed_sel(a_feed_half),
    .feed_tag(a_feed_tag), .feed_busy(a_feed_busy), .a_edge, .tag_out(row_tag));

  wc_b_buffer #(.K_ROWS(K_ROWS), .N_COLS(N_COLS)) u_bbuf (
    .clk, .rst_n, .fill_start(b_fill_start), .fill_half(b_fill_half), .fill_base(b_fill_base),
    .fill_busy(b_fill_busy), .preq(b_req), .prsp(b_rsp),
    .feed_start(b_feed_start), .feed_half(b_feed_half), .feed_sel(b_feed_half),
    .feed_busy(b_feed_busy), .w_edge);

  wc_systolic_array #(.K_ROWS(K_ROWS), .N_COLS(N_COLS)) u_array (
    .clk, .rst_n, .a_edge, .w_edge, .p_bottom);

  wc_accum_buffer #(.N_COLS(N_COLS), .K_ROWS(K_ROWS), .M_MAX(M_MAX), .NBUF(3), .WP(D_P)) u_acc (
    .clk, .rst_n, .p_bottom, .tag_in(row_tag), .alloc, .alloc_bank, .alloc_base, .alloc_m,
    .busy(acc_busy), .preq(d_req), .prsp(d_rsp), .tile_done);

  // ---------------- vector unit ----------------
  wc_vector_unit u_vec (
    .clk, .rst_n, .cmd_valid(vec_valid), .cmd_ready(vec_ready), .cmd(vec_cmd), .busy(vec_busy),
    .stat_sum(vec_sum), .stat_sumsq(vec_sumsq), .preq(v_req), .prsp(v_rsp));

  // ---------------- counters ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt_coalesced <= '0; cnt_conflicts <= '0; cnt_tiles <= '0;
    end else begin
      cnt_coalesced <= cnt_coalesced + 32'(n_coal);
      cnt_conflicts <= cnt_conflicts + 32'(n_confl);
      if (tile_done) cnt_tiles <= cnt_tiles + 32'd1;
    end
  end

  // feed-busy flags are only informative at this level
  logic unused_busy;
  assign unused_busy = a_feed_busy ^ b_feed_busy;

  initial assert (USED <= XBAR_PORTS) else $fatal(1, "crossbar needs %0d ports", USED);
  initial assert (K_ROWS % 16 == 0 && N_COLS % 16 == 0) else $fatal(1, "array sides must be multiples of 16");
endmodule
