// wc_global_buffer -- banked on-chip global buffer of one core.
//
// NBANKS independent single-port SRAM banks of BANK_WORDS 256-bit words
// (defaults: 32 banks x 10240 words = 10 MiB, the paper's per-core size).
// Each bank performs one read or one write per cycle; read data is registered
// and appears the cycle after the access. Bank selection (low address bits)
// is done by the crossbar, so this block sees per-bank local addresses.
// No reset: SRAM contents are undefined until written, as in silicon.
module wc_global_buffer
  import wc_fp_pkg::*;
#(
  parameter int unsigned NBANKS     = 32,
  parameter int unsigned BANK_WORDS = 10240,
  localparam int unsigned BAW       = $clog2(BANK_WORDS)
) (
  input  logic           clk,
  input  logic           en    [NBANKS],
  input  logic           we    [NBANKS],
  input  logic [BAW-1:0] addr  [NBANKS],
  input  word_t          wdata [NBANKS],
  output word_t          rdata [NBANKS]
);
  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    word_t mem [BANK_WORDS];
    always_ff @(posedge clk) begin
      if (en[b]) begin
        if (we[b]) mem[addr[b]] <= wdata[b];
        else       rdata[b]     <= mem[addr[b]];
      end
    end
  end
endmodule
