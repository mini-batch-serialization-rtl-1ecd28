// tb_wc_vector_unit -- every vector operation on random fp16 data, against
// lane-wise references computed in double precision; memory behind the two
// ports is a behavioural model that stalls grants at random.
module tb_wc_vector_unit;
  import wc_fp_pkg::*;
  import wc_core_pkg::*;
  import tb_fp_ref_pkg::*;
  localparam int VL = 37;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, busy;
  vec_cmd_t cmd;
  fp32_t stat_sum, stat_sumsq;
  gb_req_t preq [2];
  gb_rsp_t prsp [2];
  int checks = 0, failures = 0;

  wc_vector_unit dut (.*);
  tb_gb_model #(.P(2), .WORDS(2048)) mem (.clk, .preq, .prsp);
  always #5 clk = ~clk;

  task automatic chk(logic c, string s);
    checks++; if (!c) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask
  task automatic run(vop_e op, int s1, int s2, int d);
    @(negedge clk);
    cmd = '{op: op, src1: gb_addr_t'(s1), src2: gb_addr_t'(s2), dst: gb_addr_t'(d), len: VL, gamma: 16'hc100, beta: 16'h3800};
    cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    while (busy) @(negedge clk);
  endtask

  fp16_t x [VL][16], y [VL][16];
  initial begin
    cmd_valid = 0; cmd = '0;
    for (int i = 0; i < VL; i++) begin
      for (int l = 0; l < 16; l++) begin
        x[i][l] = ($urandom_range(9) == 0) ? 16'h8000 : rand_fp16(8, 22);
        y[i][l] = rand_fp16(8, 22);
        mem.mem[i][l*16 +: 16] = x[i][l];
        mem.mem[256 + i][l*16 +: 16] = y[i][l];
      end
    end
    repeat (3) @(posedge clk); rst_n = 1;
    run(VOP_RELU, 0, 0, 512);
    run(VOP_RELU_MASK, 0, 0, 600);
    run(VOP_RELU_BWD, 256, 600, 640);
    run(VOP_MAX, 0, 256, 700);
    run(VOP_ADD, 0, 256, 760);
    run(VOP_AFFINE, 0, 0, 820);
    run(VOP_STATS, 0, 0, 1000);
    for (int i = 0; i < VL; i++)
      for (int l = 0; l < 16; l++) begin
        real a, b;
        logic m;
        a = fp16_to_real(x[i][l]); b = fp16_to_real(y[i][l]);
        m = a > 0.0;
        chk(mem.mem[512 + i][l*16 +: 16] == (m ? x[i][l] : 16'h0), $sformatf("RELU %0d %0d", i, l));
        chk(mem.mem[600 + i/16][(i%16)*16 + l] == m, $sformatf("MASK %0d %0d", i, l));
        chk(mem.mem[640 + i][l*16 +: 16] == (m ? y[i][l] : 16'h0), $sformatf("RELU_BWD %0d %0d", i, l));
        chk(mem.mem[700 + i][l*16 +: 16] == ((b > a) ? y[i][l] : x[i][l]), $sformatf("MAX %0d %0d", i, l));
        chk(mem.mem[760 + i][l*16 +: 16] == real_to_fp16(fp32_to_real(real_to_fp32(a + b))), $sformatf("ADD %0d %0d", i, l));
        chk(mem.mem[820 + i][l*16 +: 16] == real_to_fp16(fp32_to_real(real_to_fp32(a * -2.5 + 0.5))), $sformatf("AFFINE %0d %0d", i, l));
      end
    begin
      fp32_t es, eq;
      es = '0; eq = '0;
      for (int i = 0; i < VL; i++) for (int l = 0; l < 16; l++) begin
        es = real_to_fp32(fp32_to_real(es) + fp16_to_real(x[i][l]));
        eq = real_to_fp32(fp32_to_real(eq) + fp16_to_real(x[i][l]) * fp16_to_real(x[i][l]));
      end
      chk(stat_sum == es, $sformatf("STATS sum %h exp %h", stat_sum, es));
      chk(stat_sumsq == eq, $sformatf("STATS sumsq %h exp %h", stat_sumsq, eq));
    end
    chk(mem.n_writes == 5 * VL + (VL + 15) / 16, $sformatf("write count %0d", mem.n_writes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
