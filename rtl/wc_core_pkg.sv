// wc_core_pkg -- types shared by the blocks of one WaveCore core.
//
// gb_req_t / gb_rsp_t form one 256-bit crossbar port. A requester holds req
// (with we, addr, wdata) until it sees gnt in the same cycle; read data comes
// back with rvalid exactly one cycle after the grant. Global-buffer addresses
// count 32-byte words; the low five bits pick one of the 32 banks.
package wc_core_pkg;
  import wc_fp_pkg::*;

  localparam int unsigned GB_ADDR_W = 19;   // 10 MiB / 32 B = 327680 words
  typedef logic [GB_ADDR_W-1:0] gb_addr_t;

  typedef struct packed {
    logic     req;
    logic     we;
    gb_addr_t addr;
    word_t    wdata;
  } gb_req_t;

  typedef struct packed {
    logic  gnt;
    logic  rvalid;
    word_t rdata;
  } gb_rsp_t;

  localparam gb_req_t GB_REQ_IDLE = '{req: 1'b0, we: 1'b0, addr: '0, wdata: '0};

  // One GEMM tile for the tile controller (layout in wc_tile_ctrl).
  typedef struct packed {
    gb_addr_t    a_base;
    gb_addr_t    b_base;
    gb_addr_t    c_base;
    logic [15:0] nwaves;    // ceil(K / k) waves reduce into the tile
    logic [15:0] m;         // tile height, 1 .. M_MAX rows
  } tile_cmd_t;

  // Bookkeeping that travels with every A row through the array.
  typedef struct packed {
    logic        valid;
    logic [15:0] row;
    logic        first;     // first wave of the tile: overwrite
    logic        last;      // last wave of the tile: tile done after this row
    logic [1:0]  bank;      // accumulation buffer part
  } row_tag_t;

  // Vector unit operations.
  typedef enum logic [2:0] {
    VOP_RELU      = 3'd0,   // y = max(x, 0)
    VOP_RELU_MASK = 3'd1,   // 1-bit ReLU derivative, packed 256 per word
    VOP_RELU_BWD  = 3'd2,   // dx = dy where mask bit set, else 0
    VOP_MAX       = 3'd3,   // y = max(x1, x2), pooling step
    VOP_ADD       = 3'd4,   // y = x1 + x2, residual merge
    VOP_AFFINE    = 3'd5,   // y = gamma * x + beta, normalisation scale/shift
    VOP_STATS     = 3'd6    // sum and sum of squares of x into fp32 registers
  } vop_e;

  typedef struct packed {
    vop_e        op;
    gb_addr_t    src1;
    gb_addr_t    src2;      // second operand, or mask base for RELU_BWD
    gb_addr_t    dst;
    logic [15:0] len;       // number of 256-bit words of src1
    fp16_t       gamma;
    fp16_t       beta;
  } vec_cmd_t;

endpackage
