// wc_mac -- mixed-precision multiply-accumulate of one processing element.
//
// psum_out = psum_in + a * w, with a and w in fp16 and the sum in fp32.
// The product of two fp16 values is exact in fp32; the addition rounds to
// nearest even (see wc_fp_pkg). Following the paper, the PE checks for zero
// inputs and skips the arithmetic: when a or w is zero, psum_out is psum_in
// unchanged and `skip` is high (that is where the energy saving comes from;
// here the adder result is simply not selected). Purely combinational; the PE
// registers its inputs, so the MAC sits between the PE's input registers and
// the next PE down.
module wc_mac
  import wc_fp_pkg::*;
(
  input  fp16_t a,
  input  fp16_t w,
  input  fp32_t psum_in,
  output fp32_t psum_out,
  output logic  skip
);
  always_comb begin
    skip     = fp16_is_zero(a) || fp16_is_zero(w);
    psum_out = skip ? psum_in : fp32_add(psum_in, fp16_mul(a, w));
  end
endmodule
