// tb_fp_ref_pkg -- reference floating-point model for the testbenches.
//
// Works through the simulator's double-precision `real` type, independent of
// the bit-level functions in wc_fp_pkg: values are widened to double, the
// arithmetic is done in double, and the result is rounded back to fp32/fp16
// with round-to-nearest-even on the double's bit pattern. Subnormals are
// flushed to zero, matching the design's documented convention.
package tb_fp_ref_pkg;

  function automatic real fp16_to_real(logic [15:0] h);
    logic [63:0] d;
    if (h[14:10] == 5'd0) return 0.0;
    d = {h[15], 11'(int'(h[14:10]) - 15 + 1023), h[9:0], 42'd0};
    return $bitstoreal(d);
  endfunction

  function automatic real fp32_to_real(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // Round a double to fp32 bits (RNE, flush-to-zero, overflow -> inf).
  function automatic logic [31:0] real_to_fp32(real r);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    logic        g, s;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {2'b01, d[51:29]};
    g = d[28];
    s = d[27:0] != 0;
    if (g && (s || m[0])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [15:0] real_to_fp16(real r);
    logic [63:0] d;
    int          e;
    logic [11:0] m;
    logic        g, s;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 15'd0};
    e = int'(d[62:52]) - 1023 + 15;
    m = {2'b01, d[51:42]};
    g = d[41];
    s = d[40:0] != 0;
    if (g && (s || m[0])) m = m + 12'd1;
    if (m[11]) begin m = m >> 1; e = e + 1; end
    if (e >= 31) return {d[63], 5'h1f, 10'd0};
    if (e <= 0)  return {d[63], 15'd0};
    return {d[63], 5'(e), m[9:0]};
  endfunction

  // Random normal fp16 with exponent in [lo, hi] (biased), random sign.
  function automatic logic [15:0] rand_fp16(int lo, int hi);
    int e;
    e = lo + int'($urandom_range(hi - lo));
    return {1'($urandom), 5'(e), 10'($urandom)};
  endfunction

  // Reference for psum + a*w in the PE: the product is exact in double, the
  // sum of two fp32 values rounds once in double and once to fp32; for the
  // exponent spreads used by the tests that double rounding is harmless.
  function automatic logic [31:0] ref_mac(logic [31:0] psum, logic [15:0] a, logic [15:0] w);
    if (a[14:10] == 5'd0 || w[14:10] == 5'd0) return psum;
    return real_to_fp32(fp32_to_real(psum) + fp16_to_real(a) * fp16_to_real(w));
  endfunction

endpackage
