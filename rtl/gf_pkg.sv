// gf_pkg -- shared constants and elaboration-time functions of the
// GoldenFloat (GF) format family.
//
// A GF<N> word is {sign, exponent[E-1:0], fraction[M-1:0]} with a static
// split fixed by the ladder rule E = round((N-1)/phi^2), M = N-1-E
// (phi = (1+sqrt 5)/2), the IEEE-style bias 2^(E-1)-1 and a hidden leading
// one. The rule is evaluated here in 64-bit integer arithmetic with
// 1/phi^2 = 0.3819660112501051 scaled by 10^16; (N-1)/phi^2 is irrational,
// so it is never a tie and round-half-to-even and round-half-up agree.
// The exact integer product fits in 63 bits for every N up to 1024.
//
// Encoding conventions shared by every unit (the paper states the split,
// the bias and the hidden-one multiplier template; the special-value
// conventions are this design's choice, in the IEEE 754 style that the
// paper's remark "e = 1 leaves no normal exponents" implies):
//   exponent field 0        -> signed zero (subnormals flushed to zero)
//   exponent field all ones -> infinity (fraction 0) or NaN (fraction != 0)
//   the canonical NaN is {0, all-ones exponent, 1, 0...}.
// All rounding is round-half-up on the magnitude (ties away from zero).
package gf_pkg;

  // 1/phi^2 scaled by 10^16
  localparam longint unsigned INV_PHI2_Q16 = 64'd3819660112501051;
  localparam longint unsigned TEN16        = 64'd10000000000000000;

  // Exponent width of GF<n> by the ladder rule, n >= 4.
  function automatic int gf_exp_bits(input int n);
    longint unsigned num;
    num = (longint'(n) - 64'd1) * INV_PHI2_Q16 + TEN16 / 2;
    return int'(num / TEN16);
  endfunction

  // Fraction width of GF<n>.
  function automatic int gf_frac_bits(input int n);
    return n - 1 - gf_exp_bits(n);
  endfunction

  // Number of widths the portfolio carries and their values: the nine
  // realised rungs plus GF128, i.e. every width with committed RTL.
  localparam int NUM_WIDTHS = 10;
  localparam int WIDTHS [NUM_WIDTHS] = '{4, 8, 12, 16, 20, 24, 32, 64, 128, 256};
  localparam int MAX_WIDTH = 256;

  // Operation codes of the portfolio top.
  typedef enum logic [2:0] {
    OP_ADD  = 3'd0,   // y = a + b at the selected width
    OP_MUL  = 3'd1,   // y = a * b at the selected width
    OP_DOT4 = 3'd2,   // GF16 four-term dot product
    OP_ENC  = 3'd3,   // IEEE binary32 -> GF16
    OP_DEC  = 3'd4    // GF16 -> IEEE binary32
  } gf_op_e;

  // Index of each width in WIDTHS, as carried on the request's format field.
  typedef enum logic [3:0] {
    FMT_GF4 = 4'd0, FMT_GF8 = 4'd1, FMT_GF12 = 4'd2, FMT_GF16 = 4'd3,
    FMT_GF20 = 4'd4, FMT_GF24 = 4'd5, FMT_GF32 = 4'd6, FMT_GF64 = 4'd7,
    FMT_GF128 = 4'd8, FMT_GF256 = 4'd9
  } gf_fmt_e;

  // Status flags reported with every arithmetic result.
  typedef struct packed {
    logic invalid;    // result is NaN
    logic overflow;   // finite operands gave a result past the largest normal
    logic underflow;  // a nonzero exact result was flushed to zero
    logic inexact;    // rounding discarded nonzero bits
  } gf_flags_t;

endpackage
