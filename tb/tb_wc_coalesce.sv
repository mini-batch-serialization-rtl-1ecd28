// tb_wc_coalesce -- per-bank arbiter.
// Random request patterns are compared with a reference model of the rule:
// round-robin winner after the previous winner; if it reads, all other reads
// of the same address are granted as well; a write is granted alone. A fixed
// case with four identical reads checks that they take one access.
module tb_wc_coalesce;
  localparam int NP = 8, AW = 3;
  logic clk = 0, rst_n = 0;
  logic [NP-1:0] req, we, gnt;
  logic [AW-1:0] addr [NP];
  logic act, act_we;
  logic [2:0] win, ncoal;
  int checks = 0, failures = 0, coalesced = 0;
  int ptr = 0;
  wc_coalesce #(.NPORTS(NP), .AW(AW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check_cycle();
    logic [NP-1:0] eg;
    int w, n;
    #1;
    eg = '0; w = -1; n = 0;
    for (int i = 0; i < NP; i++)
      if (w < 0 && req[(ptr + i) % NP]) w = (ptr + i) % NP;
    if (w >= 0) begin
      eg[w] = 1;
      if (!we[w])
        for (int i = 0; i < NP; i++)
          if (i != w && req[i] && !we[i] && addr[i] == addr[w]) begin eg[i] = 1; n++; end
    end
    checks++;
    if (gnt !== eg || act !== (w >= 0) || (w >= 0 && (int'(win) != w || int'(ncoal) != n))) begin
      failures++;
      if (failures < 10) $display("FAIL req=%b we=%b gnt=%b exp=%b", req, we, gnt, eg);
    end
    coalesced += n;
    @(posedge clk);
    if (w >= 0) ptr = (w + 1) % NP;
  endtask

  initial begin
    req = 0; we = 0;
    for (int i = 0; i < NP; i++) addr[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    // four reads of address 5 plus one read of address 2
    req = 8'b0001_1111; we = 0;
    for (int i = 0; i < NP; i++) addr[i] = (i == 4) ? 3'd2 : 3'd5;
    check_cycle();
    checks++;
    if (coalesced != 3) begin failures++; $display("FAIL expected 3 coalesced reads"); end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      req = 8'($urandom); we = 8'($urandom) & 8'($urandom);
      for (int i = 0; i < NP; i++) addr[i] = 3'($urandom_range(2));
      check_cycle();
    end
    $display("coalesced reads: %0d", coalesced);
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
