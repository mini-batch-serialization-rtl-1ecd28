// wc_fp_pkg -- number formats and shared constants of the WaveCore core.
//
// The PEs multiply 16-bit floating-point inputs and accumulate in 32-bit
// floating point (mixed precision, as the paper specifies). The formats are
// IEEE binary16 and binary32. Corner cases are this design's choice, because the
// paper does not discuss them: subnormal inputs and results are flushed to
// zero, additions and the fp32->fp16 quantisation round to nearest-even,
// overflow gives infinity, and NaN is only produced for inf - inf.
// All functions are combinational and synthesizable.
package wc_fp_pkg;

  typedef logic [15:0] fp16_t;
  typedef logic [31:0] fp32_t;

  // One global-buffer / crossbar word: 256 bits = 16 fp16 values (32B).
  localparam int unsigned WORD_BITS = 256;
  localparam int unsigned LANES     = WORD_BITS / 16;
  typedef logic [WORD_BITS-1:0] word_t;

  // {select, fp16} pair that travels through the array on the A and B paths
  // (the 17b buses of the PE).
  typedef struct packed {
    logic  sel;
    fp16_t val;
  } tagged16_t;

  localparam fp32_t FP32_QNAN = 32'h7fc0_0000;

  function automatic logic fp16_is_zero(fp16_t x);
    return x[14:10] == 5'd0;           // zero or flushed subnormal
  endfunction

  // Exact fp16 x fp16 -> fp32 product (11b x 11b mantissas fit in 24 bits).
  function automatic fp32_t fp16_mul(fp16_t a, fp16_t b);
    logic        s;
    logic [21:0] p;
    logic [8:0]  e;
    s = a[15] ^ b[15];
    if (a[14:10] == 5'h1f || b[14:10] == 5'h1f) begin
      if (fp16_is_zero(a) || fp16_is_zero(b)) return FP32_QNAN;
      return {s, 8'hff, 23'd0};
    end
    if (fp16_is_zero(a) || fp16_is_zero(b)) return {s, 31'd0};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = 9'(a[14:10]) + 9'(b[14:10]) + 9'd97;   // -15 -15 +127
    if (p[21]) return {s, 8'(e + 9'd1), p[20:0], 2'b00};
    return {s, e[7:0], p[19:0], 3'b000};
  endfunction

  function automatic fp32_t fp16_to_fp32(fp16_t h);
    if (h[14:10] == 5'h1f) return {h[15], 8'hff, h[9:0], 13'd0};
    if (fp16_is_zero(h))   return {h[15], 31'd0};
    return {h[15], 8'(9'(h[14:10]) + 9'd112), h[9:0], 13'd0};
  endfunction

  // fp32 + fp32 -> fp32, round to nearest even, subnormals flushed to zero.
  function automatic fp32_t fp32_add(fp32_t a, fp32_t b);
    fp32_t       x, y, t;
    logic [26:0] mx, my;      // 1.23 mantissa + guard, round, sticky
    logic [27:0] sum;
    logic [7:0]  d;
    logic [9:0]  e;           // signed working exponent
    logic        sy;
    int          lz;
    logic        rnd;
    logic [24:0] mr;
    x = a; y = b;
    if (x[30:23] == 8'd0) x = {x[31], 31'd0};
    if (y[30:23] == 8'd0) y = {y[31], 31'd0};
    if (x[30:23] == 8'hff || y[30:23] == 8'hff) begin
      if (x[30:23] == 8'hff && y[30:23] == 8'hff && x[31] != y[31]) return FP32_QNAN;
      return (x[30:23] == 8'hff) ? x : y;
    end
    if (y[30:0] > x[30:0]) begin t = x; x = y; y = t; end  // |x| >= |y|
    if (y[30:23] == 8'd0) begin
      if (x[30:23] == 8'd0) return {x[31] & y[31], 31'd0};
      return x;
    end
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    d  = x[30:23] - y[30:23];
    if (d >= 8'd27) begin
      my = 27'd1;                                   // only the sticky bit
    end else begin
      sy = (my & ~(27'h7ff_ffff << d)) != '0;       // bits shifted out
      my = (my >> d) | 27'(sy);
    end
    e = {2'b00, x[30:23]};
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e = e + 10'd1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      if (sum == '0) return 32'd0;             // exact cancellation: +0
      lz = 0;                                  // logarithmic normaliser
      if (sum[26:11] == '0) begin sum = sum << 16; lz = lz + 16; end
      if (sum[26:19] == '0) begin sum = sum << 8;  lz = lz + 8;  end
      if (sum[26:23] == '0) begin sum = sum << 4;  lz = lz + 4;  end
      if (sum[26:25] == '0) begin sum = sum << 2;  lz = lz + 2;  end
      if (sum[26]    == '0) begin sum = sum << 1;  lz = lz + 1;  end
      e = e - 10'(lz);
    end
    // sum[26] is the hidden one, sum[25:3] the mantissa, sum[2:0] G R S
    rnd = sum[2] & (sum[1] | sum[0] | sum[3]);
    mr  = {1'b0, sum[26:3]} + 25'(rnd);
    if (mr[24]) begin mr = mr >> 1; e = e + 10'd1; end
    if ($signed(e) <= 0)      return {x[31], 31'd0};
    if ($signed(e) >= 255)    return {x[31], 8'hff, 23'd0};
    return {x[31], e[7:0], mr[22:0]};
  endfunction

  // fp32 -> fp16 quantisation, round to nearest even, flush to zero.
  function automatic fp16_t fp32_to_fp16(fp32_t f);
    logic signed [9:0] e;
    logic [11:0]       mr;
    logic              rnd;
    if (f[30:23] == 8'hff) return {f[31], 5'h1f, (f[22:0] != 0) ? 10'h200 : 10'h000};
    if (f[30:23] == 8'd0)  return {f[31], 15'd0};
    e = $signed({2'b00, f[30:23]}) - 10'sd112;
    rnd = f[12] & ((f[11:0] != 0) | f[13]);
    mr  = {1'b0, 1'b1, f[22:13]} + 12'(rnd);
    if (mr[11]) e = e + 10'sd1;
    if (e >= 10'sd31) return {f[31], 5'h1f, 10'd0};
    if (e <= 10'sd0)  return {f[31], 15'd0};
    return {f[31], e[4:0], mr[11] ? mr[10:1] : mr[9:0]};
  endfunction

  // fp16 ordering helper: true when a > b (zeros of either sign compare equal).
  function automatic logic fp16_gt(fp16_t a, fp16_t b);
    logic za, zb;
    za = fp16_is_zero(a); zb = fp16_is_zero(b);
    if (za && zb) return 1'b0;
    if (za) return b[15];
    if (zb) return !a[15];
    if (a[15] != b[15]) return b[15];
    return a[15] ? (a[14:0] < b[14:0]) : (a[14:0] > b[14:0]);
  endfunction

endpackage
