// tb_wc_b_buffer -- B local buffer: fills both halves (B blocks) from a
// memory model with random grant stalls, then feeds them back to back (the
// second feed starts in the cycle the first reads its last row) and checks
// every weight-path edge value and select cycle by cycle, plus the select
// held on the edge while no feed is running.
module tb_wc_b_buffer;
  import wc_fp_pkg::*;
  import wc_core_pkg::*;
  localparam int K = 12, N = 64, WPR = N * 16 / 256, LP = (WPR >= 4) ? WPR / 2 : WPR;
  logic clk = 0, rst_n = 0;
  logic fill_start, fill_half, fill_busy, feed_start, feed_half, feed_sel, feed_busy;
  gb_addr_t fill_base;
  gb_req_t preq [LP];
  gb_rsp_t prsp [LP];
  tagged16_t w_edge [N];
  int checks = 0, failures = 0, cyc = 0;
  wc_b_buffer #(.K_ROWS(K), .N_COLS(N)) dut (.*);
  tb_gb_model #(.P(LP), .WORDS(512)) mem (.clk, .preq, .prsp);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  task automatic chk(logic c, string s);
    checks++; if (!c) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask
  fp16_t val [2][K][N];
  int    base [2] = '{8, 300};
  int    P [2];
  initial begin
    fill_start = 0; feed_start = 0; fill_half = 0; feed_half = 0; feed_sel = 0; fill_base = 0;
    for (int h = 0; h < 2; h++)
      for (int j = 0; j < K; j++)
        for (int c = 0; c < N; c++) begin
          val[h][j][c] = 16'($urandom);
          mem.mem[base[h] + j*WPR + c/16][(c%16)*16 +: 16] = val[h][j][c];
        end
    P[0] = 100000; P[1] = 100000;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < N; c++) chk(w_edge[c].sel == 1'b1, "reset select");
    for (int h = 0; h < 2; h++) begin
      @(negedge clk);
      fill_start = 1; fill_half = 1'(h); fill_base = gb_addr_t'(base[h]);
      @(negedge clk); fill_start = 0;
      chk(fill_busy, "fill busy");
      while (fill_busy) @(negedge clk);
    end
    @(negedge clk);
    P[0] = cyc; feed_start = 1; feed_half = 0; feed_sel = 0;
    @(negedge clk); feed_start = 0;
    repeat (K - 1) @(negedge clk);
    P[1] = cyc; feed_start = 1; feed_half = 1; feed_sel = 1;
    @(negedge clk); feed_start = 0;
    repeat (K + 4) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(negedge clk) if (rst_n && cyc > P[0]) begin
    for (int c = 0; c < N; c++) begin
      logic busy_row;
      busy_row = 0;
      for (int h = 0; h < 2; h++) begin
        int j;
        j = cyc - P[h] - 2;
        if (j >= 0 && j < K) begin
          busy_row = 1;
          chk(w_edge[c] == '{sel: 1'(h), val: val[h][j][c]},
              $sformatf("cycle %0d col %0d got %h exp %h", cyc - P[0], c, w_edge[c], val[h][j][c]));
        end
      end
      if (!busy_row)
        chk(w_edge[c].sel == ((cyc >= P[1] + 2 || cyc < P[0] + 2) ? 1'b1 : 1'b0), $sformatf("idle sel cycle %0d", cyc - P[0]));
    end
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
