// wc_vector_unit -- vector unit for the memory-bound layers.
//
// Sits on two crossbar ports next to the global buffer (port 0 reads, port 1
// writes) and processes one 256-bit word = 16 fp16 lanes at a time:
//   RELU      y = max(x, 0)                        (activation forward)
//   RELU_MASK 1-bit derivative of ReLU (x > 0), 16 words of x pack into one
//             256-bit mask word at dst + idx/16   (stored instead of 16b values)
//   RELU_BWD  dx = dy where the mask bit is set, else 0; mask at src2 + idx/16
//   MAX       y = max(x1, x2)                      (one max-pooling step)
//   ADD       y = x1 + x2 in fp32, rounded to fp16 (residual merge)
//   AFFINE    y = gamma * x + beta, fp32 then fp16 (normalisation scale/shift)
//   STATS     sum and sum of squares of all lanes, in fp32 (mean / variance
//             inputs of group normalisation; division and square root are left
//             to software)
// The paper names the layer types these units serve but not their operations
// or structure; this operation set and the one-word-at-a-time sequencer are
// this design's choices. A command is accepted when cmd_ready; busy stays high
// until the last write has been granted. Each element costs 2-5 cycles.
module wc_vector_unit
  import wc_fp_pkg::*;
  import wc_core_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cmd_valid,
  output logic     cmd_ready,
  input  vec_cmd_t cmd,
  output logic     busy,
  output fp32_t    stat_sum,
  output fp32_t    stat_sumsq,
  output gb_req_t  preq [2],
  input  gb_rsp_t  prsp [2]
);
  typedef enum logic [2:0] {S_IDLE, S_RD1, S_W1, S_RD2, S_W2, S_WR} state_e;
  state_e      st;
  vec_cmd_t    c;
  logic [15:0] idx;
  word_t       x1, x2, mask_acc, y;
  logic        two_src, writes_now;

  assign cmd_ready = (st == S_IDLE);
  assign busy      = (st != S_IDLE);
  assign two_src   = (c.op == VOP_MAX) || (c.op == VOP_ADD) || (c.op == VOP_RELU_BWD);

  // mask bits of the current word merged into the packed mask
  word_t mask_next;
  always_comb begin
    mask_next = mask_acc;
    for (int l = 0; l < LANES; l++)
      mask_next[{idx[3:0], 4'(l)}] = fp16_gt(x1[l*16 +: 16], 16'h0000);
  end

  // result word
  always_comb begin
    y = '0;
    for (int l = 0; l < LANES; l++) begin
      fp16_t a, b;
      a = x1[l*16 +: 16];
      b = x2[l*16 +: 16];
      unique case (c.op)
        VOP_RELU:     y[l*16 +: 16] = fp16_gt(a, 16'h0000) ? a : 16'h0000;
        VOP_RELU_BWD: y[l*16 +: 16] = x2[{idx[3:0], 4'(l)}] ? a : 16'h0000;
        VOP_MAX:      y[l*16 +: 16] = fp16_gt(b, a) ? b : a;
        VOP_ADD:      y[l*16 +: 16] = fp32_to_fp16(fp32_add(fp16_to_fp32(a), fp16_to_fp32(b)));
        VOP_AFFINE:   y[l*16 +: 16] = fp32_to_fp16(fp32_add(fp16_mul(a, c.gamma), fp16_to_fp32(c.beta)));
        default:      y[l*16 +: 16] = 16'h0000;
      endcase
    end
    if (c.op == VOP_RELU_MASK) y = mask_next;
  end

  // running statistics over the current word
  fp32_t sum_next, sq_next;
  always_comb begin
    sum_next = stat_sum;
    sq_next  = stat_sumsq;
    for (int l = 0; l < LANES; l++) begin
      sum_next = fp32_add(sum_next, fp16_to_fp32(x1[l*16 +: 16]));
      sq_next  = fp32_add(sq_next, fp16_mul(x1[l*16 +: 16], x1[l*16 +: 16]));
    end
  end

  assign writes_now = (c.op != VOP_STATS) &&
                      ((c.op != VOP_RELU_MASK) || idx[3:0] == 4'hf || idx + 16'd1 == c.len);

  always_comb begin
    preq[0] = GB_REQ_IDLE;
    preq[1] = GB_REQ_IDLE;
    if (st == S_RD1) preq[0] = '{req: 1'b1, we: 1'b0, addr: c.src1 + gb_addr_t'(idx), wdata: '0};
    if (st == S_RD2) preq[0] = '{req: 1'b1, we: 1'b0,
                                 addr: (c.op == VOP_RELU_BWD) ? c.src2 + gb_addr_t'(idx[15:4]) : c.src2 + gb_addr_t'(idx),
                                 wdata: '0};
    if (st == S_WR && writes_now) preq[1] = '{req: 1'b1, we: 1'b1,
                                 addr: (c.op == VOP_RELU_MASK) ? c.dst + gb_addr_t'(idx[15:4]) : c.dst + gb_addr_t'(idx),
                                 wdata: y};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; idx <= '0; x1 <= '0; x2 <= '0; mask_acc <= '0;
      stat_sum <= '0; stat_sumsq <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (cmd_valid && cmd.len != 0) begin
          c <= cmd; idx <= '0; mask_acc <= '0; st <= S_RD1;
          if (cmd.op == VOP_STATS) begin stat_sum <= '0; stat_sumsq <= '0; end
        end
        S_RD1: if (prsp[0].gnt) st <= S_W1;
        S_W1: if (prsp[0].rvalid) begin
          x1 <= prsp[0].rdata;
          st <= two_src ? S_RD2 : S_WR;
        end
        S_RD2: if (prsp[0].gnt) st <= S_W2;
        S_W2: if (prsp[0].rvalid) begin x2 <= prsp[0].rdata; st <= S_WR; end
        S_WR: begin
          if (c.op == VOP_RELU_MASK) mask_acc <= mask_next;
          if (c.op == VOP_STATS) begin stat_sum <= sum_next; stat_sumsq <= sq_next; end
          if (!writes_now || prsp[1].gnt) begin
            if (c.op == VOP_RELU_MASK && idx[3:0] == 4'hf) mask_acc <= '0;
            idx <= idx + 16'd1;
            st  <= (idx + 16'd1 == c.len) ? S_IDLE : S_RD1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
