// safecim_pkg: types and constants shared by the SafeCiM floating-point
// compute-in-memory macro.
//
// Number formats
//   * Operands and partial sums are BFLOAT16: sign in bit 15, biased
//     exponent (bias 127) in bits 14..7, fraction in bits 6..0.
//   * Inside the array a mantissa is the 12-bit integer {1, M, 0000}
//     (hidden one, seven fraction bits, four zero pad bits), carried as a
//     13-bit two's-complement number with the operand's sign applied.
//     Its value is mant * 2^(E - 127 - 11).
//   * A product of two such mantissas is a 26-bit signed integer whose
//     value is prod * 2^(Ex + Ew - 2*127 - 2*11); the exponent that goes
//     with it is the 9-bit sum Ex + Ew (no bias removed).
// The 12/13/26-bit widths, the ic x oc x H x W = 8 x 4 x 16 x 8 stencil, the
// group size of 4 and the three adder levels follow the published design.
// The 5-bit alignment offsets and the 9-bit exponent sums are this design's
// own choice (the published analysis uses 4-bit offsets and 8-bit exponents
// for its pre-aligned baseline, which shifts shorter words).
package safecim_pkg;

  // BFLOAT16 word and its fields
  typedef logic [15:0] bf16_t;
  typedef struct packed {
    logic       sign;
    logic [7:0] exp;
    logic [6:0] frac;
  } bf16_fields_t;

  localparam int unsigned BF16_BIAS = 127;
  localparam int unsigned EXP_W     = 8;   // BFLOAT16 exponent
  localparam int unsigned FRAC_W    = 7;   // BFLOAT16 fraction
  localparam int unsigned PAD_W     = 4;   // zeros appended to 1.M
  localparam int unsigned MAG_W     = 1 + FRAC_W + PAD_W;  // 12-bit 1.M
  localparam int unsigned MANT_W    = MAG_W + 1;           // 13-bit signed
  localparam int unsigned PROD_W    = 2 * MANT_W;          // 26-bit product
  localparam int unsigned ESUM_W    = EXP_W + 1;           // Ex + Ew
  localparam int unsigned OFF_W     = 5;                   // alignment offset

  // A product of value prod * 2^(esum - PROD_EXP_OFFSET) whose magnitude has
  // its leading one at bit L becomes a BFLOAT16 with biased exponent
  // L + esum - PROD_EXP_OFFSET + 127.
  localparam int PROD_EXP_OFFSET = 2 * BF16_BIAS + 2 * (MAG_W - 1);  // 276
  localparam int TILE_NORM_OFFSET = PROD_EXP_OFFSET - BF16_BIAS;     // 149

  // Stencil defaults (ic x oc x H x W)
  localparam int unsigned IC_T  = 8;
  localparam int unsigned OC_T  = 4;
  localparam int unsigned H_T   = 16;
  localparam int unsigned W_T   = 8;
  localparam int unsigned GROUP = 4;

  typedef logic signed [MANT_W-1:0] mant_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic        [ESUM_W-1:0] esum_t;

endpackage
