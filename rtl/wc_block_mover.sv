// wc_block_mover -- moves a block of rows between the global buffer and a
// local buffer through P crossbar ports.
//
// A block is nrows rows of WPR 256-bit words stored contiguously in the
// global buffer from `base` (row i, word j at base + i*WPR + j). The words of
// a row are issued in groups of P, one word per port; a port keeps requesting
// until granted and the group advances when all P have been granted, so bank
// conflicts only slow the transfer. Reads: each returned word comes out on
// the lane of its port with its row and word index, one cycle after the
// grant. Writes: the client supplies wdata[p] for word grp*P+p of row cur_row.
// busy stays high until the last read word has returned. P must divide WPR.
// Used as the fill engine of the A/B local buffers and as the drain engine of
// the accumulation buffer (this design's choice of structure).
module wc_block_mover
  import wc_fp_pkg::*;
  import wc_core_pkg::*;
#(
  parameter int unsigned P   = 8,
  parameter int unsigned WPR = 8,
  localparam int unsigned NG = WPR / P
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        is_write,
  input  gb_addr_t    base,
  input  logic [15:0] nrows,
  output logic        busy,
  output gb_req_t     preq   [P],
  input  gb_rsp_t     prsp   [P],
  // write data for the group being issued
  output logic [15:0] cur_row,
  output logic [15:0] cur_grp,
  input  word_t       wdata  [P],
  // read data towards the local buffer
  output logic        rd_en  [P],
  output logic [15:0] rd_row [P],
  output logic [15:0] rd_word[P],
  output word_t       rd_data[P]
);
  logic          issuing, wr_q;
  logic [P-1:0]  pending, gnt, left;
  logic [15:0]   row, grp, rows_q;
  gb_addr_t      base_q;
  logic [P-1:0]  rd_out;           // reads granted last cycle
  logic [15:0]   tag_row [P];
  logic [15:0]   tag_word[P];

  always_comb begin
    for (int p = 0; p < P; p++) begin
      gnt[p]        = prsp[p].gnt;
      preq[p].req   = issuing && pending[p];
      preq[p].we    = wr_q;
      preq[p].addr  = base_q + gb_addr_t'(row) * gb_addr_t'(WPR) + gb_addr_t'(grp) * gb_addr_t'(P) + gb_addr_t'(p);
      preq[p].wdata = wdata[p];
    end
    left = pending & ~gnt;
  end

  assign busy    = issuing || (rd_out != '0);
  assign cur_row = row;
  assign cur_grp = grp;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      pending <= '0;
      rd_out  <= '0;
      row     <= '0;
      grp     <= '0;
      wr_q    <= 1'b0;
      rows_q  <= '0;
      base_q  <= '0;
    end else begin
      rd_out <= issuing ? (pending & gnt & {P{!wr_q}}) : '0;
      if (!issuing) begin
        if (start && nrows != 0 && rd_out == '0) begin
          issuing <= 1'b1;
          pending <= '1;
          row     <= '0;
          grp     <= '0;
          wr_q    <= is_write;
          rows_q  <= nrows;
          base_q  <= base;
        end
      end else if (left == '0) begin
        pending <= '1;
        if (int'(grp) == NG - 1) begin
          grp <= '0;
          row <= row + 16'd1;
          if (row + 16'd1 == rows_q) issuing <= 1'b0;
        end else begin
          grp <= grp + 16'd1;
        end
      end else begin
        pending <= left;
      end
    end
    for (int p = 0; p < P; p++) begin
      tag_row[p]  <= row;
      tag_word[p] <= 16'(int'(grp) * P + p);
    end
  end

  always_comb
    for (int p = 0; p < P; p++) begin
      rd_en[p]   = rd_out[p] && prsp[p].rvalid;
      rd_row[p]  = tag_row[p];
      rd_word[p] = tag_word[p];
      rd_data[p] = prsp[p].rdata;
    end
endmodule
