// floatsd8_pkg: number formats and shared types of the FloatSD8 LSTM datapath.
//
// Formats
//   FP8      1 sign, 5 exponent (bias 15), 2 mantissa bits. Exponent field 0 is
//            subnormal (0.mm x 2^-14). There is no Inf/NaN: field 31 is finite.
//   FP16     1 sign, 5 exponent (bias 15), 10 mantissa bits, same conventions.
//   FloatSD8 [7:5] exponent e, [4] sign, [3:0] magnitude index k.
//            Magnitude M = k for k <= 10 and k + 3 for k >= 11, so
//            M is one of 0..10, 14..18 and the value is +-M * 2^(e-9).
//            M is the sum of a most-significant-group digit in {0,4,8,16}
//            (the 3-digit group, digits worth 4/2/1, two places up) and a
//            second-group digit in {-2,-1,0,1,2}: at most two non-zero
//            signed digits per weight. These 31 distinct values are the
//            35 digit combinations with duplicates merged. The bit layout and
//            the bias 9 are this design's choice; bias 9 is the one that puts
//            exactly 42 non-zero values in (0, 0.5], the count of quantized
//            sigmoid levels the sigmoid table needs.
//
// Datapath terms
//   The MAC turns every operand into a term: value = (-1)^neg * sig/1024 * 2^exp
//   with an 11-bit significand. Partial products of an FP8 input (3-bit
//   significand) and a power-of-two digit are exact terms.
package floatsd8_pkg;

  typedef logic [7:0]  fp8_t;
  typedef logic [15:0] fp16_t;
  typedef logic [7:0]  fsd8_t;

  localparam int FSD8_EXP_BIAS = 9;
  localparam int FP_EXP_BIAS   = 15;
  localparam int FP_EMIN       = -14;   // smallest normal exponent of FP8 and FP16

  localparam int N_PAIRS = 4;           // input/weight pairs per MAC operation
  localparam int N_TERMS = 2 * N_PAIRS + 1;  // two digits per weight + the addend

  localparam int SIG_W   = 11;          // FP16 significand incl. hidden bit
  localparam int GUARD   = 13;          // guard bits kept below the significand
  localparam int ALIGN_W = SIG_W + GUARD;        // aligned magnitude width (24)
  localparam int SUM_W   = ALIGN_W + 5;          // signed sum of nine terms (29)
  localparam int NORM_W  = SUM_W - 1;            // magnitude of the sum (28)

  localparam fp16_t FP16_MAX = 16'h7BFF;         // 65504, the saturation value
  localparam fsd8_t FSD8_ZERO = 8'h00;
  localparam fsd8_t FSD8_ONE  = 8'hAD;           // e=5, k=13 (M=16): 16*2^-4 = 1

  // One signed power-of-two digit: value = (-1)^neg * 2^pos (zero when !nz).
  typedef struct packed {
    logic       nz;
    logic       neg;
    logic [2:0] pos;
  } sd_digit_t;

  // Decoded FloatSD8 weight: (hi + lo) * 2^(exp - FSD8_EXP_BIAS).
  typedef struct packed {
    logic [2:0] exp;
    sd_digit_t  hi;     // most significant group digit, pos 2..4
    sd_digit_t  lo;     // second group digit, pos 0..1
  } fsd8_dec_t;

  // One addend of the MAC.
  typedef struct packed {
    logic              nz;
    logic              neg;
    logic signed [7:0] exp;
    logic [SIG_W-1:0]  sig;
  } term_t;

  // Output of the round & normalize stage.
  typedef struct packed {
    logic              zero;    // the sum is exactly zero
    logic              neg;
    logic signed [9:0] exp;     // exponent of the leading one
    logic [NORM_W-1:0] mant;    // normalized magnitude, leading one at the MSB
    logic signed [9:0] rexp;    // exponent after rounding to 11 bits
    logic [SIG_W-1:0]  rsig;    // rounded 11-bit significand (normal case)
  } norm_t;

endpackage
