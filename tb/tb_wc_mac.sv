// tb_wc_mac -- self-checking test of the mixed-precision MAC.
// Drives random fp16 pairs and fp32 partial sums (including zero operands,
// cancellation and large exponent gaps) and compares with the double-precision
// reference model of tb_fp_ref_pkg. Also checks the zero-skip flag.
module tb_wc_mac;
  import wc_fp_pkg::*;
  import tb_fp_ref_pkg::*;

  fp16_t a, w;
  fp32_t pin, pout, exp_v;
  logic  skip;
  int    checks = 0, failures = 0;

  wc_mac dut (.a(a), .w(w), .psum_in(pin), .psum_out(pout), .skip(skip));

  task automatic check(string what);
    #1;
    exp_v = ref_mac(pin, a, w);
    checks++;
    if (pout !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h w=%h p=%h got=%h exp=%h", what, a, w, pin, pout, exp_v);
    end
    checks++;
    if (skip !== (a[14:10] == 0 || w[14:10] == 0)) begin
      failures++; $display("FAIL skip flag a=%h w=%h", a, w);
    end
  endtask

  initial begin
    // fixed cases: 1.5*2 + 0.25 = 3.25 ; 1*1 + (-1) = 0 ; zero skip
    a = 16'h3e00; w = 16'h4000; pin = 32'h3e80_0000; check("fixed1");
    if (pout !== 32'h4050_0000) begin failures++; $display("FAIL fixed 3.25 got %h", pout); end
    checks++;
    a = 16'h3c00; w = 16'h3c00; pin = 32'hbf80_0000; check("cancel");
    a = 16'h0000; w = 16'h4400; pin = 32'h4120_0000; check("zero a");
    a = 16'h4400; w = 16'h8000; pin = 32'h4120_0000; check("zero w");
    for (int i = 0; i < 20000; i++) begin
      a = rand_fp16(5, 25); w = rand_fp16(5, 25);
      if ($urandom_range(15) == 0) a = 16'h0000;
      case ($urandom_range(3))
        0: pin = 32'd0;
        1: pin = {1'($urandom), 8'(100 + $urandom_range(50)), 23'($urandom)};
        2: pin = real_to_fp32(-(fp16_to_real(a) * fp16_to_real(w)) * (1.0 + real'($urandom_range(7)) / 1024.0));
        default: pin = {1'($urandom), 8'(127 + $urandom_range(20) - 10), 23'($urandom)};
      endcase
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
