// hbfp_pkg -- number formats, sizes and operation codes shared by the HBFP
// accelerator.
//
// Hybrid block floating point (HBFP) keeps every dot product in block
// floating point (BFP): a vector of signed fixed-point mantissas m_i that
// share a single exponent e, so that element i is worth m_i * 2^e.  All other
// operations use ordinary floating point (FP).
//
// Sizes that follow the published configuration ("hbfp8_16", tile 24):
//   * BFP dot-product mantissas are 8 bits, weights are stored with 16-bit
//     mantissas, and a weight tile is 24 x 24.
//   * FP activations carry an 8-bit mantissa and an 8-bit exponent.  Here
//     that is a bfloat16-like word: sign, 8-bit biased exponent (bias 127),
//     7 stored fraction bits plus a hidden one.
//   * The shared BFP exponent is a 10-bit two's-complement integer.
// Choices of this design: the FP format has no subnormals, infinities or
// NaNs (exponent field 0 means zero, overflow saturates to the largest
// finite value), and weight updates use a wide FP word with a 16-bit
// mantissa (15 fraction bits) so that the 16-bit weight storage is kept.
package hbfp_pkg;

  // ---- sizes --------------------------------------------------------------
  localparam int unsigned TILE       = 24;  // tile edge and vector length
  localparam int unsigned MANT_W     = 8;   // BFP mantissa used in dot products
  localparam int unsigned WMANT_W    = 16;  // BFP mantissa of stored weights
  localparam int unsigned BEXP_W     = 10;  // shared BFP exponent (signed)
  localparam int unsigned FP_EXP_W   = 8;   // FP exponent field
  localparam int unsigned FP_FRAC_W  = 7;   // narrow FP stored fraction
  localparam int unsigned WFP_FRAC_W = 15;  // wide FP stored fraction
  localparam int unsigned FP_W       = 1 + FP_EXP_W + FP_FRAC_W;   // 16
  localparam int unsigned WFP_W      = 1 + FP_EXP_W + WFP_FRAC_W;  // 24
  localparam int unsigned FP_BIAS    = (1 << (FP_EXP_W - 1)) - 1;  // 127

  // ---- on-chip buffers (words of TILE values) ----------------------------
  localparam int unsigned ACT_DEPTH  = 16384;
  localparam int unsigned W_DEPTH    = 16384;   // 682 tiles of 24 x 24
  localparam int unsigned ACT_AW     = $clog2(ACT_DEPTH);
  localparam int unsigned W_AW       = $clog2(W_DEPTH);

  // ---- narrow FP word -----------------------------------------------------
  typedef struct packed {
    logic                 sign;
    logic [FP_EXP_W-1:0]  exp;
    logic [FP_FRAC_W-1:0] frac;
  } fp_t;

  // ---- operations of the activation/loss unit ----------------------------
  typedef enum logic [2:0] {
    ACT_PASS     = 3'd0,  // out = x
    ACT_ADD      = 3'd1,  // out = x + y            (FP accumulation of tiles)
    ACT_ADD_RELU = 3'd2,  // out = max(0, x + y)    (last tile + ReLU)
    ACT_RELU_BWD = 3'd3,  // out = (y > 0) ? x : 0  (ReLU derivative)
    ACT_SUB      = 3'd4   // out = x - y            (squared-loss gradient)
  } act_op_e;

  // ---- commands of the sequencer -----------------------------------------
  typedef enum logic [1:0] {
    CMD_LOAD_W  = 2'd0,   // load a weight tile into the MatMul array
    CMD_MATMUL  = 2'd1,   // stream activation rows through the datapath
    CMD_WUPDATE = 2'd2,   // w <- w - lr * g on one weight tile
    CMD_LOAD_A  = 2'd3    // load an FP tile from the activation buffer
  } cmd_op_e;

  // ---- one command of the sequencer --------------------------------------
  //   CMD_LOAD_W : tile rows w_row .. w_row+TILE-1 of the weight buffer
  //                (narrow form) into the MatMul array, transposed if asked
  //   CMD_LOAD_A : activation rows src .. src+TILE-1 into the array, converted
  //                to BFP with one exponent for the whole tile (two passes)
  //   CMD_MATMUL : for r < rows: dst+r = act_op(MatMul(src+r), aux+r)
  //   CMD_WUPDATE: weight tile at w_row -= lr * (gradient rows src ..)
  typedef struct packed {
    cmd_op_e           op;
    act_op_e           act_op;
    logic              transpose;
    logic [W_AW-1:0]   w_row;
    logic [ACT_AW-1:0] src;
    logic [ACT_AW-1:0] aux;
    logic [ACT_AW-1:0] dst;
    logic [ACT_AW:0]   rows;
    fp_t               lr;
  } hbfp_cmd_t;

endpackage
