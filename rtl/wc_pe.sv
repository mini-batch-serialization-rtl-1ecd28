// wc_pe -- WaveCore processing element with double-buffered weights.
//
// A weight-stationary systolic PE. Three input registers latch what arrives
// from the neighbours each cycle: the A operand with its register select
// ({sel, fp16}, 17 bits, from the left), the weight path ({sel, fp16}, 17 bits,
// from above) and the fp32 partial sum (from above). Two weight registers,
// wreg[0] and wreg[1], sit between a demultiplexer (driven by the weight path's
// select bit) and a multiplexer (driven by the A path's select bit). The MAC
// (wc_mac) computes p_out = p_q + a_q * wreg[a_q.sel] combinationally, skipping
// the arithmetic for zero operands; p_out goes straight to the PE below.
// The A pair is forwarded to the right and the weight pair downwards, one
// register stage per PE. This structure follows the paper's PE drawing.
//
// Weight loading (this design's choice; the paper does not say how a PE picks
// its own word out of the shifted column): the PE remembers the select of the
// last weight it captured (cap_sel). A weight word whose select differs from
// cap_sel is captured into wreg[sel] and replaced on the way down by a word
// carrying the old select, which no PE below will capture; words whose select
// equals cap_sel pass unchanged. Sending the k words of a B column, row 0
// first, with the new select therefore leaves word r in PE row r. Loads must
// alternate between the two registers, which is what double buffering does.
// Word r is captured 2r+1 cycles after it enters the column.
//
// Reset: synchronous, active low; cap_sel resets to 1 so the first load goes
// to wreg[0].
module wc_pe
  import wc_fp_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  tagged16_t a_in,
  input  tagged16_t w_in,
  input  fp32_t     p_in,
  output tagged16_t a_out,
  output tagged16_t w_out,
  output fp32_t     p_out
);
  tagged16_t a_q, w_q;
  fp32_t     p_q;
  fp16_t     wreg [2];
  logic      cap_sel;
  logic      capture;
  logic      skip;

  assign capture = (w_q.sel != cap_sel);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_q     <= '0;
      w_q     <= '{sel: 1'b1, val: '0};
      p_q     <= '0;
      wreg[0] <= '0;
      wreg[1] <= '0;
      cap_sel <= 1'b1;
    end else begin
      a_q <= a_in;
      w_q <= w_in;
      p_q <= p_in;
      if (capture) begin
        wreg[w_q.sel] <= w_q.val;
        cap_sel       <= w_q.sel;
      end
    end
  end

  // forward down: a captured word is replaced by one with the old select
  assign w_out = capture ? '{sel: cap_sel, val: w_q.val} : w_q;
  assign a_out = a_q;

  wc_mac u_mac (.a(a_q.val), .w(wreg[a_q.sel]), .psum_in(p_q), .psum_out(p_out), .skip(skip));

  // the skip flag only gates energy in silicon; functionally p_out already
  // bypasses the adder, so it is not used further here
  logic unused_skip;
  assign unused_skip = skip;
endmodule
