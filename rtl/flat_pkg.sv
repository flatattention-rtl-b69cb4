// flat_pkg: types and constants shared by the tile-based many-PE accelerator.
//
// The NoC carries single-flit transfers: every flit holds one 1024-bit data word
// (the NoC link width of the evaluated chip) plus a header that names a destination
// rectangle of tiles (a unicast is a 1x1 rectangle, a row or column multicast a 1xN or
// Nx1 one), a reduction root and a target word address. Data words are split into
// 64 lanes of 16 bits. The lanes hold signed Q8.8 fixed-point numbers; the evaluated
// chip computes in FP16, so the number format is this design's own simplification.
package flat_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NOC_DW  = 1024;            // NoC link / L1 word width (bits)
  localparam int unsigned LANE_W  = 16;              // one FP16-sized lane
  localparam int unsigned LANES   = NOC_DW / LANE_W; // 64 lanes per word
  localparam int unsigned COORD_W = 6;               // tile coordinate (0..63)
  localparam int unsigned ADDR_W  = 32;              // word address (L1 or HBM channel)
  localparam int unsigned LEN_W   = 16;              // transfer / loop length
  localparam int unsigned FRAC    = 8;               // Q8.8 fraction bits

  typedef logic [NOC_DW-1:0]  word_t;
  typedef logic [COORD_W-1:0] coord_t;
  typedef logic [ADDR_W-1:0]  addr_t;
  typedef logic [LEN_W-1:0]   len_t;
  typedef logic signed [LANE_W-1:0] lane_t;

  // ---------------------------------------------------------------- NoC flit
  typedef enum logic [2:0] {
    FK_WRITE   = 3'd0,  // write data word into L1 of every tile of the rectangle
    FK_RED_SUM = 3'd1,  // row-wise sum reduction towards root_x
    FK_RED_MAX = 3'd2,  // row-wise max reduction towards root_x
    FK_HBM_RD  = 3'd3,  // read request to the HBM controller of column x_lo
    FK_HBM_WR  = 3'd4   // write request to the HBM controller of column x_lo
  } flit_kind_e;

  typedef struct packed {
    flit_kind_e kind;
    coord_t     src_x, src_y;   // injecting tile (multicast tree root)
    coord_t     x_lo, x_hi;     // destination rectangle, columns
    coord_t     y_lo, y_hi;     // destination rectangle, rows
    coord_t     root_x;         // reduction root column (reductions only)
    addr_t      addr;           // L1 word address, or HBM word address for HBM_*
    word_t      data;           // payload; for FK_HBM_RD bits [ADDR_W-1:0] = reply L1 address
  } flit_t;

  // router port numbering
  localparam int unsigned P_N = 0, P_E = 1, P_S = 2, P_W = 3, P_L = 4, NPORT = 5;

  // ---------------------------------------------------------------- L1 ports
  typedef struct packed {
    logic  req;
    logic  we;
    addr_t addr;
    word_t wdata;
  } l1_req_t;

  typedef struct packed {
    logic  gnt;     // request accepted this cycle
    logic  rvalid;  // read data of the request granted in the previous cycle
    word_t rdata;
  } l1_rsp_t;

  // ---------------------------------------------------------------- commands
  typedef struct packed {
    flit_kind_e kind;      // FK_WRITE / FK_RED_* / FK_HBM_WR: L1 -> NoC; FK_HBM_RD: HBM -> L1
    coord_t     x_lo, x_hi, y_lo, y_hi, root_x;
    addr_t      src;       // L1 source address (HBM source address for FK_HBM_RD)
    addr_t      dst;       // destination address (remote L1 or HBM)
    len_t       len;       // number of words
  } dma_cmd_t;

  typedef struct packed {
    addr_t      a;         // A[:,k] at a+k   (lanes 0..ME_M-1)
    addr_t      b;         // B[k,:] at b+k   (lanes 0..ME_N-1)
    addr_t      c;         // C[:,n] at c+n   (lanes 0..ME_M-1)
    len_t       k;         // reduction depth
    logic       acc;       // 1: C += A*B, 0: C = A*B
    logic [3:0] shift;     // result = acc >>> shift (Q8.8 * Q8.8 -> shift 8)
  } me_cmd_t;

  typedef enum logic [2:0] {
    VOP_MAX    = 3'd0,  // d[i] = max(s[i], t)
    VOP_ADD    = 3'd1,  // d[i] = s[i] + t
    VOP_MUL    = 3'd2,  // d[i] = s[i] * t        (Q8.8)
    VOP_DIV    = 3'd3,  // d[i] = s[i] / t        (Q8.8)
    VOP_SUBEXP = 3'd4,  // d[i] = exp(s[i] - t)   (Q8.8)
    VOP_RMAX   = 3'd5,  // d    = max_i s[i]      (lane-wise)
    VOP_RSUM   = 3'd6   // d    = sum_i s[i]      (lane-wise)
  } vop_e;

  typedef struct packed {
    vop_e  op;
    addr_t src;        // s[i] at src+i
    addr_t opnd;       // t, one word, lane-wise operand (unused by RMAX/RSUM)
    addr_t dst;        // d[i] at dst+i (one word for RMAX/RSUM)
    len_t  n;          // number of words
  } ve_cmd_t;

  typedef enum logic [1:0] {UNIT_DMA = 2'd0, UNIT_ME = 2'd1, UNIT_VE = 2'd2} unit_e;

  typedef struct packed {
    unit_e    unit;
    coord_t   x_lo, x_hi, y_lo, y_hi;  // tiles that take the command
    dma_cmd_t dma;
    me_cmd_t  me;
    ve_cmd_t  ve;
  } tile_cmd_t;

  // ---------------------------------------------------------------- lane arithmetic
  function automatic lane_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return lane_t'(v);
  endfunction

endpackage
