// tb_wavecore_core -- end-to-end test of one WaveCore core.
//
// A reduced core (16 x 16 array, 32-row tiles, 8192-word global buffer) runs
// four GEMM tiles back to back while the vector unit works concurrently:
//   tile 0: 3 waves, m = 32   (gap-less waves, reduction across waves)
//   tile 1: 2 waves, m = 20   (too short to hide the next weight load: stalls)
//   tile 2: 1 wave,  m = 32
//   tile 3: 2 waves, m = 32   (reuses accumulation part 0 after its drain)
// Operands are written through a memory-controller port; results are read
// back through two memory-controller ports that request the same word in the
// same cycle, which the crossbar serves with one coalesced bank access.
// Expected C: for each wave the fp32 dot product accumulated down the array
// rows, waves added in order in fp32, then rounded to fp16 -- computed with the
// double-based reference model. Vector ops (ReLU, ReLU mask, ReLU backward,
// max, add, affine, statistics) are checked against lane-wise references.
// Every mechanism must occur at least once: gap-less wave starts, feed
// stalls, zero-operand skips, bank conflicts, coalesced loads, multi-wave
// reduction, all three accumulation parts, a drain overlapping computation,
// and each vector operation.
module tb_wavecore_core;
  import wc_fp_pkg::*;
  import wc_core_pkg::*;
  import tb_fp_ref_pkg::*;

  localparam int K = 16, N = 16, MM = 32, BANKW = 256;
  localparam int NT = 4;
  localparam gb_addr_t A_REG = 0, B_REG = 2048, C_REG = 4096, V_REG = 6144;

  logic clk = 0, rst_n = 0;
  logic tile_valid, tile_ready, tile_idle, vec_valid, vec_ready, vec_busy;
  tile_cmd_t tile_cmd;
  vec_cmd_t  vec_cmd;
  fp32_t vec_sum, vec_sumsq;
  gb_req_t mc_req [4];
  gb_rsp_t mc_rsp [4];
  logic [31:0] cnt_waves, cnt_gapless, cnt_stall, cnt_coalesced, cnt_conflicts, cnt_tiles;

  wavecore_core #(.K_ROWS(K), .N_COLS(N), .M_MAX(MM), .GB_BANK_WORDS(BANKW)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycles = 0;
  always @(posedge clk) cycles++;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---- memory-controller port helpers ----
  task automatic mc_write(gb_addr_t a, word_t d);
    @(negedge clk);
    mc_req[0] = '{req: 1, we: 1, addr: a, wdata: d};
    forever begin #1; if (mc_rsp[0].gnt) break; @(negedge clk); end
    @(negedge clk); mc_req[0] = GB_REQ_IDLE;
  endtask

  // two ports read the same word; both must get it
  task automatic mc_read2(gb_addr_t a, output word_t d);
    logic g0, g1;
    word_t d0, d1;
    g0 = 0; g1 = 0;
    @(negedge clk);
    mc_req[0] = '{req: 1, we: 0, addr: a, wdata: '0};
    mc_req[1] = '{req: 1, we: 0, addr: a, wdata: '0};
    while (!(g0 && g1)) begin
      #1;
      if (mc_rsp[0].gnt) g0 = 1;
      if (mc_rsp[1].gnt) g1 = 1;
      @(posedge clk); #1;
      if (mc_rsp[0].rvalid) d0 = mc_rsp[0].rdata;
      if (mc_rsp[1].rvalid) d1 = mc_rsp[1].rdata;
      @(negedge clk);
      if (g0) mc_req[0] = GB_REQ_IDLE;
      if (g1) mc_req[1] = GB_REQ_IDLE;
    end
    mc_req[0] = GB_REQ_IDLE; mc_req[1] = GB_REQ_IDLE;
    chk(d0 === d1, "both readers see the same word");
    d = d0;
  endtask

  // ---- operands ----
  int    nw [NT] = '{3, 2, 1, 2};
  int    mt [NT] = '{32, 20, 32, 32};
  fp16_t A [NT][3][MM][K];
  fp16_t Bw[NT][3][K][N];
  int    zeros = 0;
  int    a_off [NT], b_off [NT];

  function automatic word_t pack(fp16_t v [LANES]);
    word_t w;
    for (int l = 0; l < LANES; l++) w[l*16 +: 16] = v[l];
    return w;
  endfunction

  function automatic fp16_t rnd_op();
    if ($urandom_range(9) == 0) return 16'h0000;
    return rand_fp16(11, 19);
  endfunction

  // ---- vector test data ----
  localparam int VL = 20;             // words
  fp16_t vx [VL][LANES], vy [VL][LANES], vg [VL][LANES];

  logic drained_while_busy = 0;
  int   tiles_seen = 0;
  always @(posedge clk) if (dut.tile_done && dut.u_ctrl.ga_n != dut.u_ctrl.gl) drained_while_busy <= 1;
  logic [2:0] banks_used = 0;
  always @(posedge clk) if (dut.alloc) banks_used[dut.alloc_bank] <= 1'b1;

  initial begin
    word_t w;
    fp16_t lanes [LANES];
    tile_valid = 0; vec_valid = 0; tile_cmd = '0; vec_cmd = '0;
    for (int p = 0; p < 4; p++) mc_req[p] = GB_REQ_IDLE;
    repeat (3) @(posedge clk); rst_n = 1;

    // operands: K = N = 16 so an A row and a B row are one word each
    begin
      int ao = 0, bo = 0;
      for (int t = 0; t < NT; t++) begin
        a_off[t] = ao; b_off[t] = bo;
        for (int wv = 0; wv < nw[t]; wv++) begin
          for (int i = 0; i < mt[t]; i++) begin
            for (int r = 0; r < K; r++) begin
              A[t][wv][i][r] = rnd_op(); lanes[r] = A[t][wv][i][r];
              if (A[t][wv][i][r] == 0) zeros++;
            end
            mc_write(A_REG + gb_addr_t'(ao), pack(lanes)); ao++;
          end
          for (int r = 0; r < K; r++) begin
            for (int c = 0; c < N; c++) begin Bw[t][wv][r][c] = rnd_op(); lanes[c] = Bw[t][wv][r][c]; end
            mc_write(B_REG + gb_addr_t'(bo), pack(lanes)); bo++;
          end
        end
      end
    end
    for (int i = 0; i < VL; i++) begin
      for (int l = 0; l < LANES; l++) begin
        vx[i][l] = rand_fp16(8, 20); vy[i][l] = rand_fp16(8, 20);
      end
      mc_write(V_REG + gb_addr_t'(i), pack(vx[i]));
      mc_write(V_REG + gb_addr_t'(64 + i), pack(vy[i]));
    end

    fork
      // tiles
      for (int t = 0; t < NT; t++) begin
        @(negedge clk);
        tile_cmd = '{a_base: A_REG + gb_addr_t'(a_off[t]), b_base: B_REG + gb_addr_t'(b_off[t]),
                     c_base: C_REG + gb_addr_t'(t * MM), nwaves: 16'(nw[t]), m: 16'(mt[t])};
        tile_valid = 1;
        forever begin #1; if (tile_ready) break; @(negedge clk); end
        @(negedge clk); tile_valid = 0;
      end
      // vector ops, concurrently
      begin
        vec_cmd_t vc;
        vop_e ops [7] = '{VOP_RELU, VOP_RELU_MASK, VOP_RELU_BWD, VOP_MAX, VOP_ADD, VOP_AFFINE, VOP_STATS};
        for (int k = 0; k < 7; k++) begin
          vc = '{op: ops[k], src1: V_REG, src2: (ops[k] == VOP_RELU_BWD) ? V_REG + 256 : V_REG + 64,
                 dst: V_REG + 128 + gb_addr_t'(k) * 192, len: VL, gamma: 16'h3e00, beta: 16'hbc00};
          if (ops[k] == VOP_RELU_BWD) vc.src1 = V_REG + 64;      // dy = vy, mask from vx
          @(negedge clk);
          vec_cmd = vc; vec_valid = 1;
          forever begin #1; if (vec_ready) break; @(negedge clk); end
          @(negedge clk); vec_valid = 0;
          @(negedge clk);
          while (vec_busy) @(negedge clk);
          if (ops[k] == VOP_RELU_MASK) begin
            // copy the mask where RELU_BWD expects it: V_REG+256
            for (int j = 0; j < 2; j++) begin
              word_t mw;
              mc_read2(V_REG + 128 + 192 + gb_addr_t'(j), mw);
              mc_write(V_REG + 256 + gb_addr_t'(j), mw);
            end
          end
          if (ops[k] == VOP_STATS) begin
            real s = 0.0, q = 0.0;
            fp32_t es, eq;
            es = '0; eq = '0;
            for (int i = 0; i < VL; i++) for (int l = 0; l < LANES; l++) begin
              es = real_to_fp32(fp32_to_real(es) + fp16_to_real(vx[i][l]));
              eq = real_to_fp32(fp32_to_real(eq) + fp16_to_real(vx[i][l]) * fp16_to_real(vx[i][l]));
            end
            chk(vec_sum == es, $sformatf("STATS sum %h exp %h", vec_sum, es));
            chk(vec_sumsq == eq, $sformatf("STATS sumsq %h exp %h", vec_sumsq, eq));
          end
        end
      end
    join

    // wait for the tiles
    @(negedge clk);
    while (!tile_idle) @(negedge clk);

    // check C tiles
    for (int t = 0; t < NT; t++)
      for (int i = 0; i < mt[t]; i++) begin
        mc_read2(C_REG + gb_addr_t'(t * MM + i), w);
        for (int c = 0; c < N; c++) begin
          fp32_t acc, p;
          acc = '0;
          for (int wv = 0; wv < nw[t]; wv++) begin
            p = '0;
            for (int r = 0; r < K; r++) p = ref_mac(p, A[t][wv][i][r], Bw[t][wv][r][c]);
            acc = (wv == 0) ? p : real_to_fp32(fp32_to_real(acc) + fp32_to_real(p));
          end
          chk(w[c*16 +: 16] == real_to_fp16(fp32_to_real(acc)),
              $sformatf("C tile %0d row %0d col %0d got %h exp %h", t, i, c, w[c*16 +: 16], real_to_fp16(fp32_to_real(acc))));
        end
      end

    // check vector results
    for (int k = 0; k < 6; k++)
      for (int i = 0; i < VL; i++) begin
        if (k == 1 && i >= 2) continue;
        mc_read2(V_REG + 128 + gb_addr_t'(k) * 192 + gb_addr_t'(i), w);
        for (int l = 0; l < LANES; l++) begin
          fp16_t e;
          real xr, yr;
          xr = fp16_to_real(vx[i][l]); yr = fp16_to_real(vy[i][l]);
          case (k)
            0: e = (xr > 0.0) ? vx[i][l] : 16'h0;
            2: e = (xr > 0.0) ? vy[i][l] : 16'h0;
            3: e = (yr > xr) ? vy[i][l] : vx[i][l];
            4: e = real_to_fp16(fp32_to_real(real_to_fp32(xr + yr)));
            5: e = real_to_fp16(fp32_to_real(real_to_fp32(xr * 1.5 - 1.0)));
            default: e = 0;
          endcase
          if (k != 1) chk(w[l*16 +: 16] == e, $sformatf("vector op %0d word %0d lane %0d got %h exp %h", k, i, l, w[l*16 +: 16], e));
        end
        if (k == 1)
          for (int j = 0; j < 16 && i * 16 + j < VL; j++)
            for (int l = 0; l < LANES; l++)
              chk(w[j*16 + l] == (fp16_to_real(vx[i*16 + j][l]) > 0.0), "ReLU mask bit");
      end

    // mechanisms
    $display("waves=%0d gapless=%0d stalls=%0d coalesced=%0d conflicts=%0d tiles=%0d zeros=%0d cycles=%0d",
             cnt_waves, cnt_gapless, cnt_stall, cnt_coalesced, cnt_conflicts, cnt_tiles, zeros, cycles);
    chk(cnt_waves == 8, "eight waves streamed");
    chk(cnt_tiles == NT, "four tiles drained");
    chk(cnt_gapless > 0, "gap-less wave start happened");
    chk(cnt_stall > 0, "feed stall happened");
    chk(cnt_coalesced > 0, "coalesced load happened");
    chk(cnt_conflicts > 0, "bank conflict happened");
    chk(zeros > 0, "zero operands (skipped MACs) present");
    chk(banks_used == 3'b111, "all three accumulation parts used");
    chk(drained_while_busy, "a drain overlapped with computation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
