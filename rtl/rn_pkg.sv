// rn_pkg - shared types and constants of the RoadNet-RT accelerator.
//
// The accelerator works on INT8 feature maps held 32 channels at a time: one
// "pixel word" (pix_t) is the 32 channel values of one pixel, 256 bits.  The
// 32-lane width, the INT8 data type, the 35x120 feature map buffer and the
// count of eight buffers are the numbers of the RoadNet-RT FPGA design; the
// accumulator width, the layer descriptor format and the fixed-point formats
// of the attention path are choices of this implementation.
//
// A layer program is a list of desc_t words executed in order by ctrl_fsm.
// Each module uses only some of these constants, so a lint run on a single
// module reports the others as unused parameters; that is expected.
package rn_pkg;

  localparam int LANES     = 32;            // depth of the PE arrays
  localparam int DATA_W    = 8;             // INT8 activations and weights
  localparam int ACC_W     = 32;            // accumulator width
  localparam int KTAPS     = 9;             // 3x3 kernels only
  localparam int FM_H      = 35;            // feature map buffer height
  localparam int FM_W      = 120;           // feature map buffer width
  localparam int FM_DEPTH  = FM_H * FM_W;   // 4200 pixel words per buffer
  localparam int FM_AW     = 13;            // address width of a buffer
  localparam int N_FMBUF   = 8;             // number of feature map buffers
  localparam int WB_WORDS  = 4200;          // weight buffer words (32 weights each)
  localparam int WB_AW     = 13;
  localparam int GP_WORDS  = 8;             // global-pooling / attention words
  localparam int MAX_TILES = 4;             // 32-channel input tiles per pointwise pass
  localparam int DESC_DEPTH = 64;           // layer program length
  localparam int ROW_W     = 6;             // row index width (0..H on padded grid)
  localparam int COL_W     = 7;             // column index width (0..W on padded grid)

  typedef logic signed [DATA_W-1:0] q8_t;
  typedef q8_t [LANES-1:0]          pix_t;   // lane i = channel i of the tile

  // Layer operations.
  typedef enum logic [3:0] {
    OP_END    = 4'd0,   // stop, raise done
    OP_LOAD   = 4'd1,   // DDR -> fm buffer dst, h*w words from ddr_addr
    OP_STORE  = 4'd2,   // fm buffer src -> DDR, h*w words to ddr_addr
    OP_DW     = 4'd3,   // 3x3 depthwise conv src -> dst
    OP_PW     = 4'd4,   // 1x1 pointwise conv, tiles src..src+ntile_m1 -> dst
    OP_GAP    = 4'd5,   // global average pool src -> gp word dst
    OP_FC     = 4'd6,   // 1x1 conv on gp words src.. -> gp word dst (pointwise module)
    OP_SIG    = 4'd7,   // sigmoid LUT gp word src -> gp word dst
    OP_MUL    = 4'd8,   // dst = src * gp[src2]            (GAM)
    OP_MULADD = 4'd9,   // dst = src + src * gp[src2]      (FFM)
    OP_ADD    = 4'd10   // dst = src + src2 (fm buffers)   (residual)
  } op_e;

  typedef enum logic [1:0] {ATT_MUL = 2'd0, ATT_MULADD = 2'd1, ATT_ADD = 2'd2} att_mode_e;

  typedef struct packed {
    op_e         op;
    logic [2:0]  src;       // fm buffer or gp word
    logic [2:0]  src2;      // second fm buffer (ADD) or attention gp word (MUL, MULADD)
    logic [2:0]  dst;       // fm buffer or gp word
    logic [1:0]  ntile_m1;  // input tiles - 1 (PW, FC)
    logic [ROW_W-1:0] h;    // map height, 1..35
    logic [COL_W-1:0] w;    // map width, 1..120
    logic        stride2;   // DW: keep even rows and columns
    logic        relu;      // DW, PW, FC: ReLU
    logic        bn_post;   // PW, FC: batch norm after ReLU
    logic [4:0]  shift;     // requantisation right shift
    logic [WB_AW-1:0] wbase;// first weight word
    logic [23:0] recip;     // GAP: round(2^24 / (h*w))
    logic [31:0] ddr_addr;  // LOAD, STORE: DDR word address
  } desc_t;

  // Round-to-nearest arithmetic right shift, optional ReLU, saturation to INT8.
  function automatic q8_t requant(input logic signed [ACC_W-1:0] acc,
                                  input logic [4:0] sh, input logic relu);
    logic signed [ACC_W:0] a, r;
    a = {acc[ACC_W-1], acc};
    if (sh == 5'd0) r = a;
    else            r = (a + ((ACC_W+1)'(1) <<< (sh - 5'd1))) >>> sh;
    if (relu && r < 0) r = '0;
    if (r > 127)       return q8_t'(127);
    else if (r < -128) return q8_t'(-128);
    else               return q8_t'(r);
  endfunction

  // Saturation of a wider signed value to INT8.
  function automatic q8_t sat8(input logic signed [19:0] v);
    if (v > 127)       return q8_t'(127);
    else if (v < -128) return q8_t'(-128);
    else               return q8_t'(v);
  endfunction

endpackage
