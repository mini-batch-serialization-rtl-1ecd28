// wc_crossbar -- requester-to-bank crossbar in front of the global buffer.
//
// NPORTS 256-bit requester ports (24 in the paper) reach NBANKS global-buffer
// banks (32). The bank is the low log2(NBANKS) bits of the word address; the
// remaining bits address the word inside the bank. Each bank has a wc_coalesce
// arbiter (round-robin plus load coalescing). Protocol per port (gb_req_t /
// gb_rsp_t): hold req until gnt, which is combinational in the same cycle;
// read data arrives with rvalid one cycle after the grant. A request that
// loses arbitration simply waits (a bank conflict stall); conflicts and
// coalesced reads are counted for observation.
module wc_crossbar
  import wc_fp_pkg::*;
  import wc_core_pkg::*;
#(
  parameter int unsigned NPORTS     = 24,
  parameter int unsigned NBANKS     = 32,
  parameter int unsigned BANK_WORDS = 10240,
  localparam int unsigned BAW       = $clog2(BANK_WORDS),
  localparam int unsigned BW        = $clog2(NBANKS),
  localparam int unsigned PW        = $clog2(NPORTS)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  gb_req_t        preq   [NPORTS],
  output gb_rsp_t        prsp   [NPORTS],
  // towards the global buffer banks
  output logic           b_en   [NBANKS],
  output logic           b_we   [NBANKS],
  output logic [BAW-1:0] b_addr [NBANKS],
  output word_t          b_wdata[NBANKS],
  input  word_t          b_rdata[NBANKS],
  // event counts of this cycle
  output logic [7:0]     n_coalesced,
  output logic [7:0]     n_conflicts
);
  logic [NPORTS-1:0] breq [NBANKS];
  logic [NPORTS-1:0] bgnt [NBANKS];
  logic [NPORTS-1:0] pwe;
  logic [BAW-1:0]    plocal [NPORTS];
  logic [BW-1:0]     pbank  [NPORTS];
  logic [PW-1:0]     ncoal  [NBANKS];
  logic [PW-1:0]     win    [NBANKS];
  logic              act_we [NBANKS];
  logic [NPORTS-1:0] gnt_any;
  logic [NPORTS-1:0] rd_q;
  logic [BW-1:0]     bank_q [NPORTS];

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      pwe[p]    = preq[p].we;
      pbank[p]  = preq[p].addr[BW-1:0];
      plocal[p] = BAW'(preq[p].addr >> BW);
    end
    for (int b = 0; b < NBANKS; b++)
      for (int p = 0; p < NPORTS; p++)
        breq[b][p] = preq[p].req && (int'(pbank[p]) == b);
  end

  for (genvar b = 0; b < NBANKS; b++) begin : g_arb
    logic act;
    wc_coalesce #(.NPORTS(NPORTS), .AW(BAW)) u_arb (
      .clk, .rst_n, .req(breq[b]), .we(pwe), .addr(plocal),
      .gnt(bgnt[b]), .act(act), .act_we(act_we[b]), .win(win[b]), .ncoal(ncoal[b])
    );
    assign b_en[b]    = act;
    assign b_we[b]    = act_we[b];
    assign b_addr[b]  = plocal[win[b]];
    assign b_wdata[b] = preq[win[b]].wdata;
  end

  always_comb begin
    gnt_any     = '0;
    n_coalesced = '0;
    for (int b = 0; b < NBANKS; b++) begin
      gnt_any     |= bgnt[b];
      n_coalesced += 8'(ncoal[b]);
    end
    n_conflicts = '0;
    for (int p = 0; p < NPORTS; p++)
      if (preq[p].req && !gnt_any[p]) n_conflicts += 8'd1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_q <= '0;
    else        rd_q <= gnt_any & ~pwe;
    for (int p = 0; p < NPORTS; p++) bank_q[p] <= pbank[p];
  end

  always_comb
    for (int p = 0; p < NPORTS; p++) begin
      prsp[p].gnt    = gnt_any[p];
      prsp[p].rvalid = rd_q[p];
      prsp[p].rdata  = b_rdata[bank_q[p]];
    end

endmodule
