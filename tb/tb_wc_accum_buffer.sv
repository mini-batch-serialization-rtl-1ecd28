// tb_wc_accum_buffer -- accumulation buffer: drives column results on
// p_bottom with the same per-column skew the systolic array produces and the
// row tags with the row-0 timing of the A buffer. Tile 0 (part 0, m=6) gets
// three waves (first / middle / last), tile 1 (part 1, m=8) a single wave,
// back to back. The drained fp16 words in the memory model are compared with
// a reference built from the same fp32 add order, and busy / tile_done are
// checked.
module tb_wc_accum_buffer;
  import wc_fp_pkg::*;
  import wc_core_pkg::*;
  localparam int K = 4, N = 32, MM = 8, WP = 2, WPR = N * 16 / 256;
  localparam int NW = 4;                       // waves in the schedule
  logic clk = 0, rst_n = 0;
  fp32_t p_bottom [N];
  row_tag_t tag_in;
  logic alloc;
  logic [1:0] alloc_bank;
  gb_addr_t alloc_base;
  logic [15:0] alloc_m;
  logic [2:0] busy;
  gb_req_t preq [WP];
  gb_rsp_t prsp [WP];
  logic tile_done;
  int checks = 0, failures = 0, cyc = 0, ndone = 0;
  wc_accum_buffer #(.N_COLS(N), .K_ROWS(K), .M_MAX(MM), .NBUF(3), .WP(WP)) dut (.*);
  tb_gb_model #(.P(WP), .WORDS(256)) mem (.clk, .preq, .prsp);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && tile_done) ndone++;
  task automatic chk(logic c, string s);
    checks++; if (!c) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask
  // wave w: bank, m, first, last, start cycle T
  int wb [NW] = '{0, 0, 0, 1};
  int wm [NW] = '{6, 6, 6, 8};
  int wf [NW] = '{1, 0, 0, 1};
  int wl [NW] = '{0, 0, 1, 1};
  int T  [NW];
  fp32_t v [NW][MM][N];
  fp32_t ref_acc [2][MM][N];
  int cbase [2] = '{16, 100};
  initial begin
    alloc = 0; alloc_bank = 0; alloc_base = 0; alloc_m = 0;
    for (int w = 0; w < NW; w++) for (int i = 0; i < MM; i++) for (int c = 0; c < N; c++)
      v[w][i][c] = fp16_to_fp32(16'($urandom_range(16'h3000, 16'h5000)) | (16'($urandom_range(0, 1)) << 15));
    for (int w = 0; w < NW; w++) for (int i = 0; i < wm[w]; i++) for (int c = 0; c < N; c++)
      ref_acc[wb[w]][i][c] = wf[w] ? v[w][i][c] : fp32_add(ref_acc[wb[w]][i][c], v[w][i][c]);
    for (int w = 0; w < NW; w++) T[w] = 1000000;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    chk(busy == 3'b000, "idle after reset");
    alloc = 1; alloc_bank = 0; alloc_base = gb_addr_t'(cbase[0]); alloc_m = 16'(wm[0]);
    @(negedge clk);
    alloc = 1; alloc_bank = 1; alloc_base = gb_addr_t'(cbase[1]); alloc_m = 16'(wm[3]);
    @(negedge clk); alloc = 0;
    chk(busy == 3'b011, "busy after alloc");
    T[0] = cyc + 2;
    for (int w = 1; w < NW; w++) T[w] = T[w-1] + wm[w-1];
    while (ndone < 2 && cyc < T[NW-1] + 2000) @(negedge clk);
    chk(ndone == 2, "two drains");
    repeat (3) @(negedge clk);
    chk(busy == 3'b000, "all parts free");
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < ((b == 0) ? wm[0] : wm[3]); i++)
        for (int c = 0; c < N; c++) begin
          fp16_t got;
          got = mem.mem[cbase[b] + i*WPR + c/16][(c%16)*16 +: 16];
          chk(got == fp32_to_fp16(ref_acc[b][i][c]),
              $sformatf("part %0d row %0d col %0d got %h exp %h", b, i, c, got, fp32_to_fp16(ref_acc[b][i][c])));
        end
    chk(mem.n_writes == (wm[0] + wm[3]) * WPR, "write count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // stimulus: tags at T+i, column c result at T+i+K+c
  always @(negedge clk) begin
    tag_in = '0;
    for (int c = 0; c < N; c++) p_bottom[c] = 32'h7fc00000;   // junk when unused
    for (int w = 0; w < NW; w++) begin
      int i;
      i = cyc - T[w];
      if (i >= 0 && i < wm[w])
        tag_in = '{valid: 1, row: 16'(i), first: wf[w][0], last: wl[w][0], bank: 2'(wb[w])};
      for (int c = 0; c < N; c++) begin
        i = cyc - T[w] - K - c;
        if (i >= 0 && i < wm[w]) p_bottom[c] = v[w][i][c];
      end
    end
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
