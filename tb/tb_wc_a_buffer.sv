// tb_wc_a_buffer -- A local buffer: fills both halves from a memory model
// with random grant stalls, then streams them back to back (the second feed
// starts in the cycle the first reads its last row) and checks every array
// edge value, its select and its r-cycle skew, and the row tag, cycle by
// cycle, including the idle value between and after the feeds.
module tb_wc_a_buffer;
  import wc_fp_pkg::*;
  import wc_core_pkg::*;
  localparam int K = 32, MM = 16, WPR = K * 16 / 256;
  logic clk = 0, rst_n = 0;
  logic fill_start, fill_half, fill_busy, feed_start, feed_half, feed_sel, feed_busy;
  gb_addr_t fill_base;
  logic [15:0] fill_rows, feed_m;
  row_tag_t feed_tag, tag_out;
  gb_req_t preq [WPR];
  gb_rsp_t prsp [WPR];
  tagged16_t a_edge [K];
  int checks = 0, failures = 0, cyc = 0;
  wc_a_buffer #(.K_ROWS(K), .M_MAX(MM)) dut (.*);
  tb_gb_model #(.P(WPR), .WORDS(512)) mem (.clk, .preq, .prsp);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  task automatic chk(logic c, string s);
    checks++; if (!c) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask
  fp16_t val [2][MM][K];
  int    m [2] = '{10, 16};
  int    base [2] = '{0, 200};
  int    S [2];
  initial begin
    fill_start = 0; feed_start = 0; fill_half = 0; feed_half = 0; feed_sel = 0;
    fill_base = 0; fill_rows = 0; feed_m = 0; feed_tag = '0;
    for (int h = 0; h < 2; h++)
      for (int i = 0; i < MM; i++)
        for (int r = 0; r < K; r++) begin
          val[h][i][r] = 16'($urandom) | 16'h0400;
          mem.mem[base[h] + i*WPR + r/16][(r%16)*16 +: 16] = val[h][i][r];
        end
    S[0] = 1000; S[1] = 1000;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int h = 0; h < 2; h++) begin
      @(negedge clk);
      fill_start = 1; fill_half = 1'(h); fill_base = gb_addr_t'(base[h]); fill_rows = 16'(m[h]);
      @(negedge clk); fill_start = 0;
      while (fill_busy) @(negedge clk);
    end
    // feed half 0 then half 1
    @(negedge clk);
    S[0] = cyc; feed_start = 1; feed_half = 0; feed_sel = 0; feed_m = 16'(m[0]);
    feed_tag = '{valid: 1, row: 0, first: 1, last: 0, bank: 2};
    @(negedge clk); feed_start = 0;
    repeat (m[0] - 1) @(negedge clk);
    S[1] = cyc; feed_start = 1; feed_half = 1; feed_sel = 1; feed_m = 16'(m[1]);
    feed_tag = '{valid: 1, row: 0, first: 0, last: 1, bank: 1};
    @(negedge clk); feed_start = 0;
    repeat (m[1] + K + 4) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // cycle-by-cycle edge check
  always @(negedge clk) if (rst_n && cyc > S[0]) begin
    for (int r = 0; r < K; r++) begin
      tagged16_t e;
      e = '{sel: (cyc >= S[1] + 2 + r) ? 1'b1 : 1'b0, val: 16'h0};
      for (int h = 0; h < 2; h++) begin
        int i;
        i = cyc - S[h] - 2 - r;
        if (i >= 0 && i < m[h]) e = '{sel: 1'(h), val: val[h][i][r]};
      end
      chk(a_edge[r] == e, $sformatf("cycle %0d edge %0d got %h exp %h", cyc - S[0], r, a_edge[r], e));
    end
    begin
      row_tag_t et;
      et = '0;
      for (int h = 0; h < 2; h++) begin
        int i;
        i = cyc - S[h] - 2;
        if (i >= 0 && i < m[h]) et = '{valid: 1, row: 16'(i), first: (h == 0), last: (h == 1), bank: (h == 0) ? 2'd2 : 2'd1};
      end
      chk(tag_out == et, $sformatf("cycle %0d tag", cyc - S[0]));
    end
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
