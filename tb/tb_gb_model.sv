// tb_gb_model -- behavioural global-buffer model for block testbenches.
// P requester ports with the crossbar protocol (grant in the request cycle,
// read data one cycle later). Grants are withheld at random (about one cycle
// in four per port) to imitate bank conflicts. Memory words are public so a
// testbench can preload and inspect them directly.
module tb_gb_model
  import wc_fp_pkg::*;
  import wc_core_pkg::*;
#(
  parameter int P = 4,
  parameter int WORDS = 4096
) (
  input  logic    clk,
  input  gb_req_t preq [P],
  output gb_rsp_t prsp [P]
);
  word_t mem [WORDS];
  logic  stall [P];
  logic  rv [P];
  word_t rd [P];
  int    n_writes = 0;
  always @(negedge clk) for (int p = 0; p < P; p++) stall[p] = ($urandom_range(3) == 0);
  initial for (int p = 0; p < P; p++) begin stall[p] = 0; rv[p] = 0; rd[p] = '0; end
  always_comb
    for (int p = 0; p < P; p++) begin
      prsp[p].gnt    = preq[p].req && !stall[p];
      prsp[p].rvalid = rv[p];
      prsp[p].rdata  = rd[p];
    end
  always @(posedge clk)
    for (int p = 0; p < P; p++) begin
      rv[p] <= preq[p].req && !stall[p] && !preq[p].we;
      if (preq[p].req && !stall[p]) begin
        if (preq[p].we) begin mem[preq[p].addr] <= preq[p].wdata; n_writes++; end
        else rd[p] <= mem[preq[p].addr];
      end
    end
endmodule
