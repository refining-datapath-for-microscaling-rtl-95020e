// mxint_pkg: constants and types shared by the MXInt (microscaling integer) datapath.
//
// An MXInt block is BLK signed integer mantissas that share one unsigned exponent. The value
// of element i is man[i] * 2^(exp - EXP_BIAS): mantissas are read as two's-complement
// integers and the exponent is stored with a bias of 127. The 8-bit exponent, the block of 16
// activations, the 16x16 (256-value) weight tile and the 6-bit weight / 8-bit activation
// mantissas follow the paper's main quantisation (W6/A8, exponent always 8 bits). The
// 12-bit accumulator mantissa of the linear operators also follows the paper. The bias,
// the integer reading of the mantissa and the two's-complement sign are this design's choices.
package mxint_pkg;

  localparam int EXP_W    = 8;    // shared exponent width
  localparam int EXP_BIAS = 127;  // exponent bias (own choice)
  localparam int BLK      = 16;   // values per activation block (= tile width)
  localparam int ACT_M    = 8;    // activation mantissa bits, sign included
  localparam int W_M      = 6;    // weight mantissa bits, sign included
  localparam int ACC_M    = 12;   // accumulator mantissa bits of the linear operators
  localparam int IEXP_W   = 12;   // signed width used for unbiased exponent arithmetic

  typedef logic [EXP_W-1:0] exp_t;
  typedef logic signed [IEXP_W-1:0] iexp_t;

  // One activation block: 16 mantissas and their shared exponent.
  typedef struct packed {
    exp_t                        exp;
    logic [BLK-1:0][ACT_M-1:0]   man;
  } act_blk_t;

  // One weight tile: 16 rows of 16 mantissas and one shared exponent (256 values).
  typedef struct packed {
    exp_t                              exp;
    logic [BLK-1:0][BLK-1:0][W_M-1:0]  man;
  } w_tile_t;

  // An activation tile as stored for the attention products (K^T and V): 16x16 8-bit
  // mantissas with one exponent.
  typedef struct packed {
    exp_t                                exp;
    logic [BLK-1:0][BLK-1:0][ACT_M-1:0]  man;
  } a_tile_t;

  // Biased exponent to signed unbiased exponent.
  function automatic iexp_t unbias(exp_t e);
    iexp_t r;
    r = '0;
    r[EXP_W-1:0] = e;            // zero-extend: the stored exponent is unsigned
    return r - iexp_t'(EXP_BIAS);
  endfunction

endpackage
