// tb_wc_systolic_array -- systolic array with double-buffered weights.
// Runs NW waves back to back on a small array. Each wave's B block is shifted
// in (row 0 first, with the wave's register select) while the previous wave
// is still streaming, on the tightest schedule the PE capture rule allows:
//   S_w >= P_w + K            (A may enter K cycles after the B load starts)
//   P_w >= P_{w-1} + K        (one B load at a time)
//   P_w >= S_{w-2} + m + N - 2 (register of wave w-2 no longer in use)
// A rows are skewed by row index. Every array output is compared with an fp32
// dot product accumulated top row first (tb_fp_ref_pkg), at the cycle
// S + i + K + c the array's timing predicts. The first waves use m = N + K - 2
// and must then run without a single idle A cycle between waves.
module tb_wc_systolic_array;
  import wc_fp_pkg::*;
  import tb_fp_ref_pkg::*;
  localparam int K = 8, N = 6, NW = 8, MMAX = 16;

  logic clk = 0, rst_n = 0;
  tagged16_t a_edge [K];
  tagged16_t w_edge [N];
  fp32_t     p_bottom [N];
  int checks = 0, failures = 0;

  wc_systolic_array #(.K_ROWS(K), .N_COLS(N)) dut (.*);

  fp16_t A [NW][MMAX][K];
  fp16_t Bm[NW][K][N];
  int    m [NW], S [NW], P [NW];
  int    cyc = 0;

  always #5 clk = ~clk;

  function automatic fp32_t ref_dot(int w, int i, int c);
    fp32_t acc = '0;
    for (int r = 0; r < K; r++) acc = ref_mac(acc, A[w][i][r], Bm[w][r][c]);
    return acc;
  endfunction

  initial begin
    for (int w = 0; w < NW; w++) begin
      m[w] = (w < 4) ? N + K - 2 : 2 + int'($urandom_range(MMAX - 2));
      for (int i = 0; i < MMAX; i++) for (int r = 0; r < K; r++)
        A[w][i][r] = ($urandom_range(7) == 0) ? 16'h0 : rand_fp16(10, 20);
      for (int r = 0; r < K; r++) for (int c = 0; c < N; c++)
        Bm[w][r][c] = ($urandom_range(7) == 0) ? 16'h0 : rand_fp16(10, 20);
    end
    for (int w = 0; w < NW; w++) begin
      P[w] = 4;
      if (w >= 1) P[w] = (P[w-1] + K > P[w]) ? P[w-1] + K : P[w];
      if (w >= 2) P[w] = (S[w-2] + m[w-2] + N - 2 > P[w]) ? S[w-2] + m[w-2] + N - 2 : P[w];
      S[w] = P[w] + K;
      if (w >= 1 && S[w-1] + m[w-1] > S[w]) S[w] = S[w-1] + m[w-1];
    end
    for (int w = 1; w < 4; w++) begin
      checks++;
      if (S[w] != S[w-1] + m[w-1]) begin failures++; $display("FAIL schedule not gap-less at wave %0d", w); end
    end
  end

  // drive inputs for cycle `cyc` and check outputs of cycle `cyc`
  always @(negedge clk) begin
    if (cyc == 2) rst_n = 1;
    for (int c = 0; c < N; c++) begin
      w_edge[c] = '{sel: 1'b1, val: 16'h0};
      for (int w = 0; w < NW; w++) begin
        if (cyc >= P[w]) w_edge[c] = '{sel: 1'(w % 2), val: 16'h0};
        if (cyc >= P[w] && cyc < P[w] + K) w_edge[c] = '{sel: 1'(w % 2), val: Bm[w][cyc - P[w]][c]};
      end
    end
    for (int r = 0; r < K; r++) begin
      a_edge[r] = '{sel: 1'b0, val: 16'h0};
      for (int w = 0; w < NW; w++)
        if (cyc - r - S[w] >= 0 && cyc - r - S[w] < m[w])
          a_edge[r] = '{sel: 1'(w % 2), val: A[w][cyc - r - S[w]][r]};
    end
    for (int w = 0; w < NW; w++)
      for (int c = 0; c < N; c++) begin
        int i;
        i = cyc - S[w] - K - c;
        if (i >= 0 && i < m[w]) begin
          fp32_t e;
          e = ref_dot(w, i, c);
          checks++;
          if (p_bottom[c] !== e) begin
            failures++;
            if (failures < 10) $display("FAIL wave %0d row %0d col %0d got %h exp %h", w, i, c, p_bottom[c], e);
          end
        end
      end
    cyc++;
    if (cyc > S[NW-1] + m[NW-1] + K + N + 2) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
