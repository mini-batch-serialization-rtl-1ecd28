// tb_wc_pe -- single processing element.
// Checks, cycle by cycle: the one-cycle forwarding of the A pair; the weight
// capture rule (first word with a new select is captured into that register
// and forwarded with the old select, later words pass unchanged); that the
// A-path select picks the weight register, so the register being loaded does
// not disturb the one in use; the MAC result and the zero skip.
module tb_wc_pe;
  import wc_fp_pkg::*;
  import tb_fp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  tagged16_t a_in, w_in, a_out, w_out;
  fp32_t p_in, p_out;
  int checks = 0, failures = 0;

  wc_pe dut (.*);
  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic step(tagged16_t a, tagged16_t w, fp32_t p);
    a_in = a; w_in = w; p_in = p;
    @(posedge clk); #1;
  endtask

  fp16_t w0, w1, w2, x;
  fp32_t ps;
  initial begin
    a_in = '0; w_in = '{sel:1'b1, val:'0}; p_in = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    w0 = rand_fp16(12, 18); w1 = rand_fp16(12, 18); w2 = rand_fp16(12, 18);
    // load wreg[0] with w0: first new-select word is captured
    step('{sel:0, val:16'h0}, '{sel:0, val:w0}, '0);
    chk(w_out.sel == 1'b1, "captured word forwarded with old select");
    // second word with select 0 passes unchanged
    step('{sel:0, val:16'h0}, '{sel:0, val:w1}, '0);
    chk(w_out == '{sel:0, val:w1}, "second word passes");
    // multiply with wreg[0] while loading wreg[1] with w2
    x = rand_fp16(12, 18); ps = {1'b0, 8'd130, 23'($urandom)};
    step('{sel:0, val:x}, '{sel:1, val:w2}, ps);
    chk(a_out == '{sel:0, val:x}, "A forwarded after one cycle");
    chk(p_out == ref_mac(ps, x, w0), "MAC with register 0");
    chk(w_out.sel == 1'b0, "capture into register 1 forwards old select");
    // now use register 1 (w2), then register 0 again (still w0)
    step('{sel:1, val:x}, '{sel:1, val:w1}, ps);
    chk(p_out == ref_mac(ps, x, w2), "MAC with register 1");
    chk(w_out == '{sel:1, val:w1}, "pass-through after capture of register 1");
    step('{sel:0, val:x}, '{sel:1, val:16'h0}, ps);
    chk(p_out == ref_mac(ps, x, w0), "register 0 kept while register 1 loaded");
    // zero A skips: psum passes unchanged
    step('{sel:0, val:16'h0}, '{sel:1, val:16'h0}, ps);
    chk(p_out == ps, "zero A skips the arithmetic");
    for (int i = 0; i < 200; i++) begin
      x = rand_fp16(8, 22); ps = {1'($urandom), 8'(120 + $urandom_range(15)), 23'($urandom)};
      step('{sel:1'(i), val:x}, '{sel:1, val:16'h0}, ps);
      chk(p_out == ref_mac(ps, x, i % 2 ? w2 : w0), "random MAC");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
