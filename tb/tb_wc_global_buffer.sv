// tb_wc_global_buffer -- banked SRAM: random writes and reads on all banks at
// once, compared with a reference array; read data must appear exactly one
// cycle after the access and a write must not change rdata.
module tb_wc_global_buffer;
  import wc_fp_pkg::*;
  localparam int NB = 32, BW = 64;
  logic clk = 0;
  logic en [NB], we [NB];
  logic [5:0] addr [NB];
  word_t wdata [NB], rdata [NB];
  word_t ref_mem [NB][BW];
  logic  vld [NB];
  word_t expd [NB];
  int checks = 0, failures = 0;
  wc_global_buffer #(.NBANKS(NB), .BANK_WORDS(BW)) dut (.*);
  always #5 clk = ~clk;
  function automatic word_t rword();
    word_t w;
    for (int i = 0; i < 8; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction
  initial begin
    for (int b = 0; b < NB; b++) begin en[b] = 0; we[b] = 0; addr[b] = 0; wdata[b] = 0; vld[b] = 0; end
    // fill everything
    for (int a = 0; a < BW; a++) begin
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        en[b] = 1; we[b] = 1; addr[b] = 6'(a); wdata[b] = rword(); ref_mem[b][a] = wdata[b];
      end
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        if (vld[b]) begin
          checks++;
          if (rdata[b] !== expd[b]) begin failures++; if (failures < 10) $display("FAIL bank %0d", b); end
        end
        en[b] = 1'($urandom); we[b] = 1'($urandom); addr[b] = 6'($urandom); wdata[b] = rword();
        vld[b] = en[b] && !we[b];
        if (vld[b]) expd[b] = ref_mem[b][addr[b]];
        else if (t > 0 && !vld[b]) expd[b] = rdata[b];
        if (en[b] && we[b]) ref_mem[b][addr[b]] = wdata[b];
        if (!vld[b]) vld[b] = (t > 0);   // rdata must hold when not reading
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
