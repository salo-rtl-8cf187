// salo_pkg: number formats and shared types of the SALO spatial accelerator.
//
// Q, K and V elements are 8-bit two's complement with 4 fraction bits, and
// outputs are 16 bits; both follow the paper's quantisation study. All other
// formats below are choices of this design:
//   score  S   = q.k        ACC_W bits, SCORE_FRAC = 8 fraction bits
//   exp    E   = 2^S        unsigned in ACC_W bits, EXP_FRAC = 16 fraction bits
//   prob   P   = E / sum E  unsigned, P_FRAC = 15 fraction bits (1.0 = 32768)
//   output O                16 bits, OUT_FRAC = 8 fraction bits
//   weight W   = sum E      WGT_W bits, EXP_FRAC fraction bits
// The exponential is base 2 (as in Softermax); a host that wants e^x folds
// log2(e) into the query scaling together with 1/sqrt(d).
package salo_pkg;

  localparam int DATA_W     = 8;
  localparam int DATA_FRAC  = 4;
  localparam int ACC_W      = 32;
  localparam int SCORE_FRAC = 2 * DATA_FRAC;
  localparam int EXP_FRAC   = 16;
  localparam int P_FRAC     = 15;
  localparam int OUT_W      = 16;
  localparam int OUT_FRAC   = 8;
  localparam int WGT_W      = 40;
  // Reciprocal units return a 16-bit mantissa and a right-shift amount.
  localparam int MANT_W     = 16;
  localparam int SH_W       = 6;
  // Piece-wise linear exponent: 2^SEG_BITS segments over the fraction.
  localparam int SEG_BITS   = 3;
  localparam int LUT_W      = 17;
  // Scores are clamped to [EXP_MIN_INT, EXP_MAX_INT + 1) before the exponent.
  localparam int EXP_MIN_INT = -24;
  localparam int EXP_MAX_INT = 7;

  typedef logic signed [DATA_W-1:0] elem_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic signed [OUT_W-1:0]  out_t;
  typedef logic        [WGT_W-1:0]  wgt_t;
  typedef logic        [MANT_W-1:0] mant_t;
  typedef logic        [SH_W-1:0]   sh_t;

  // Operation each PE performs in a cycle (paper: the five stages).
  typedef enum logic [2:0] {
    ST_IDLE  = 3'd0,
    ST_QK    = 3'd1,   // stage 1: S = q . k, output stationary
    ST_EXP   = 3'd2,   // stage 2: Reg_acc <- 2^Reg_acc
    ST_SUM   = 3'd3,   // stage 3: row sum of exponentials, left to right
    ST_NORM  = 3'd4,   // stage 4: Reg_acc <- Reg_acc * inverse
    ST_SV    = 3'd5    // stage 5: partial sum += v * Reg_acc, weight stationary
  } stage_e;

endpackage
