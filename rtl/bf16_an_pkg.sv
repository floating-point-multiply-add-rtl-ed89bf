// Shared types and constants for the BF16 matrix engine with approximate
// normalization.
//
// Operands A (activation) and B (weight) are Bfloat16: 1 sign bit, 8 exponent
// bits (bias 127) and 7 mantissa bits, with an implicit leading one that makes
// an 8-bit significand. Partial sums travel down the columns in an extended
// format with the same sign and 8-bit exponent but an explicit 16-bit
// significand (twice the input significand width), so that rounding is done
// only once, at the south end of each column. The extended significand has its
// binary point after bit 15: value = (-1)^s * sig/2^15 * 2^(exp-127). It may be
// left un-normalized by the approximate normalizer (leading zeros allowed).
// Exponent 0 means zero (subnormal BF16 inputs are flushed to zero).
package bf16_an_pkg;

  localparam int EXP_W    = 8;            // exponent bits
  localparam int MAN_W    = 7;            // BF16 mantissa bits
  localparam int SIG_W    = MAN_W + 1;    // BF16 significand with hidden bit
  localparam int PSIG_W   = 2 * SIG_W;    // product / partial-sum significand
  localparam int SUM_W    = PSIG_W + 1;   // adder output, one carry bit
  localparam int BIAS     = 127;
  localparam int SEXP_W   = EXP_W + 2;    // signed internal exponent
  localparam int SHAMT_W  = 5;            // alignment shift amount
  localparam int EXP_MAX  = (1 << EXP_W) - 1;

  typedef logic signed [SEXP_W-1:0] sexp_t;

  // Bfloat16 word
  typedef struct packed {
    logic             sign;
    logic [EXP_W-1:0] exp;
    logic [MAN_W-1:0] man;
  } bf16_t;

  // Extended-precision partial sum: 25 bits
  typedef struct packed {
    logic              sign;
    logic [EXP_W-1:0]  exp;
    logic [PSIG_W-1:0] sig;
  } ext_t;

  // Shift chosen by the approximate normalizer
  typedef enum logic [1:0] {
    NS_NONE = 2'd0,   // leading one among sum[N:N-k]: no left shift
    NS_K    = 2'd1,   // leading one among sum[N-k-1:N-k-lambda]: shift by k
    NS_KL   = 2'd2    // neither: shift by k+lambda
  } norm_shift_e;

  localparam ext_t EXT_ZERO = '0;

endpackage
