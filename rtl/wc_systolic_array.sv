// wc_systolic_array -- K_ROWS x N_COLS mesh of double-buffered PEs.
//
// A operands enter at the left edge, one {sel, fp16} pair per array row, and
// move right one PE per cycle. Weights enter at the top edge, one {sel, fp16}
// pair per column, and move down (see wc_pe for how each PE captures its own
// weight). Partial sums start at +0 at the top and ripple down through the
// column's MACs, so p_bottom[c] is the fp32 dot product of one A row with
// column c of the loaded B block.
//
// Timing: if A element (i, r) is presented on a_edge[r] at cycle T + i + r
// (the A local buffer applies that skew), the result for A row i appears on
// p_bottom[c] during cycle T + i + K_ROWS + c. The 128x128 default is the
// paper's size.
module wc_systolic_array
  import wc_fp_pkg::*;
#(
  parameter int unsigned K_ROWS = 128,
  parameter int unsigned N_COLS = 128
) (
  input  logic      clk,
  input  logic      rst_n,
  input  tagged16_t a_edge   [K_ROWS],
  input  tagged16_t w_edge   [N_COLS],
  output fp32_t     p_bottom [N_COLS]
);
  tagged16_t a_h [K_ROWS][N_COLS+1];
  tagged16_t w_v [K_ROWS+1][N_COLS];
  fp32_t     p_v [K_ROWS+1][N_COLS];

  for (genvar r = 0; r < K_ROWS; r++) begin : g_row
    assign a_h[r][0] = a_edge[r];
    for (genvar c = 0; c < N_COLS; c++) begin : g_col
      wc_pe u_pe (
        .clk, .rst_n,
        .a_in (a_h[r][c]),   .w_in (w_v[r][c]),   .p_in (p_v[r][c]),
        .a_out(a_h[r][c+1]), .w_out(w_v[r+1][c]), .p_out(p_v[r+1][c])
      );
    end
  end

  for (genvar c = 0; c < N_COLS; c++) begin : g_edge
    assign w_v[0][c]    = w_edge[c];
    assign p_v[0][c]    = '0;
    assign p_bottom[c]  = p_v[K_ROWS][c];
  end

  // A pairs leaving the right edge and weights leaving the bottom are dropped
  logic unused_edges;
  always_comb begin
    unused_edges = 1'b0;
    for (int r = 0; r < K_ROWS; r++) unused_edges ^= ^a_h[r][N_COLS];
    for (int c = 0; c < N_COLS; c++) unused_edges ^= ^w_v[K_ROWS][c];
  end
endmodule
