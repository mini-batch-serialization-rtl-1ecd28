// tb_wc_crossbar -- crossbar plus global buffer under random traffic.
// 24 requesters issue random reads and writes (addresses drawn from a small
// range so that bank conflicts and identical reads are frequent) and hold
// each request until granted. A reference memory is updated at each granted
// write; each granted read must return, one cycle later with rvalid, the
// reference word at grant time. Checks that every bank performs at most one
// access per cycle, that no request waits forever, and that coalesced reads
// and conflicts both occur.
module tb_wc_crossbar;
  import wc_fp_pkg::*;
  import wc_core_pkg::*;
  localparam int NP = 24, NB = 32, BWD = 16;
  logic clk = 0, rst_n = 0;
  gb_req_t preq [NP];
  gb_rsp_t prsp [NP];
  logic b_en [NB], b_we [NB];
  logic [3:0] b_addr [NB];
  word_t b_wdata [NB], b_rdata [NB];
  logic [7:0] n_coalesced, n_conflicts;
  word_t refm [NB*BWD];
  word_t expd [NP];
  logic  pend [NP];
  logic  granted [NP];
  int    age [NP];
  int checks = 0, failures = 0, coal = 0, confl = 0;

  wc_crossbar #(.NPORTS(NP), .NBANKS(NB), .BANK_WORDS(BWD)) dut (.*);
  wc_global_buffer #(.NBANKS(NB), .BANK_WORDS(BWD)) u_gb (
    .clk, .en(b_en), .we(b_we), .addr(b_addr), .wdata(b_wdata), .rdata(b_rdata));
  always #5 clk = ~clk;

  function automatic word_t rword();
    word_t w;
    for (int i = 0; i < 8; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    for (int p = 0; p < NP; p++) begin preq[p] = GB_REQ_IDLE; pend[p] = 0; granted[p] = 0; age[p] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    // initialise memory through port 0
    for (int a = 0; a < NB*BWD; a++) begin
      @(negedge clk);
      preq[0] = '{req: 1, we: 1, addr: gb_addr_t'(a), wdata: rword()};
      refm[a] = preq[0].wdata;
    end
    @(negedge clk); preq[0] = GB_REQ_IDLE;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      // check read data of last cycle's grants
      for (int p = 0; p < NP; p++)
        if (pend[p]) begin
          checks++;
          if (!prsp[p].rvalid || prsp[p].rdata !== expd[p]) begin
            failures++; if (failures < 10) $display("FAIL port %0d read data", p);
          end
          pend[p] = 0;
        end else if (prsp[p].rvalid) begin
          failures++; $display("FAIL spurious rvalid port %0d", p);
        end
      // requests granted in the last cycle are done
      for (int p = 0; p < NP; p++) if (granted[p]) preq[p].req = 0;
      // new requests where idle
      for (int p = 0; p < NP; p++)
        if (!preq[p].req && $urandom_range(3) != 0)
          preq[p] = '{req: 1, we: ($urandom_range(3) == 0), addr: gb_addr_t'($urandom_range(95)), wdata: rword()};
      #1;
      coal += n_coalesced; confl += n_conflicts;
      for (int b = 0; b < NB; b++) begin
        int n;
        n = 0;
        for (int p = 0; p < NP; p++)
          if (prsp[p].gnt && preq[p].addr[4:0] == 5'(b) && preq[p].we) n++;
        checks++;
        if (n > 1) begin failures++; $display("FAIL two writes granted to bank %0d", b); end
      end
      for (int p = 0; p < NP; p++)
        if (prsp[p].gnt && !preq[p].we) begin expd[p] = refm[preq[p].addr]; pend[p] = 1; end
      for (int p = 0; p < NP; p++)
        if (prsp[p].gnt && preq[p].we) refm[preq[p].addr] = preq[p].wdata;
      for (int p = 0; p < NP; p++) begin
        granted[p] = prsp[p].gnt;
        if (prsp[p].gnt) age[p] = 0;
        else if (preq[p].req) begin
          age[p]++;
          if (age[p] == 200) begin failures++; $display("FAIL port %0d starved", p); end
        end
      end
    end
    checks += 2;
    if (coal == 0)  begin failures++; $display("FAIL no coalesced reads"); end
    if (confl == 0) begin failures++; $display("FAIL no bank conflicts"); end
    $display("coalesced=%0d conflict-cycles=%0d", coal, confl);
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
