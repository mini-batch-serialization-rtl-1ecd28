// wc_coalesce -- per-bank arbiter with load coalescing.
//
// Picks one of the requesters that target this bank, round-robin starting
// after the previous winner. If the winner reads, every other requester that
// reads the same address in the same cycle is granted too and will receive
// the same data: duplicated loads cost one bank access (the paper's load
// coalescing units; how they coalesce is this design's choice). A write is
// granted alone. Combinational grant, registered round-robin pointer.
//   req/we/addr : requests of all NPORTS requesters for this bank
//   gnt         : granted requesters (one-hot, or several coalesced reads)
//   act, act_we, win : the bank access to perform and whose it is
//   ncoal       : number of extra reads served by coalescing this cycle
module wc_coalesce #(
  parameter int unsigned NPORTS = 24,
  parameter int unsigned AW     = 14,
  localparam int unsigned PW    = $clog2(NPORTS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NPORTS-1:0] req,
  input  logic [NPORTS-1:0] we,
  input  logic [AW-1:0]     addr [NPORTS],
  output logic [NPORTS-1:0] gnt,
  output logic              act,
  output logic              act_we,
  output logic [PW-1:0]     win,
  output logic [PW-1:0]     ncoal
);
  logic [PW-1:0] ptr;

  always_comb begin
    int unsigned idx;
    act = 1'b0;
    win = '0;
    for (int i = 0; i < NPORTS; i++) begin
      idx = (32'(ptr) + 32'(i)) % NPORTS;
      if (!act && req[idx]) begin
        act = 1'b1;
        win = PW'(idx % NPORTS);
      end
    end
    act_we = act && we[win];
    gnt    = '0;
    ncoal  = '0;
    if (act) begin
      gnt[win] = 1'b1;
      if (!we[win])
        for (int i = 0; i < NPORTS; i++)
          if (req[i] && !we[i] && addr[i] == addr[win] && PW'(i) != win) begin
            gnt[i] = 1'b1;
            ncoal  = ncoal + 1'b1;
          end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)   ptr <= '0;
    else if (act) ptr <= (int'(win) == NPORTS - 1) ? '0 : win + 1'b1;
  end
endmodule
