// bf16_decode: turns one BFLOAT16 operand into the integer form the array
// multiplies.
//
// The 7 fraction bits get the hidden one prepended and four zeros appended,
// giving a 12-bit magnitude {1, M, 0000}; the sign bit then makes it a 13-bit
// two's-complement mantissa. The exponent field is passed on unchanged.
// This expansion is the one the published design describes.
//
// Own choices: an exponent field of 0 (zero or subnormal) gives a zero
// mantissa and raises is_zero, so subnormals are flushed to zero; infinities
// and NaNs (exponent 255) are treated as ordinary numbers.
//
// Interface: purely combinational, no clock.
module bf16_decode
  import safecim_pkg::*;
(
  input  bf16_t      x,
  output mant_t      mant,
  output logic [7:0] exp,
  output logic       is_zero
);

  bf16_fields_t f;
  logic [MAG_W-1:0] mag;

  always_comb begin
    f       = bf16_fields_t'(x);
    is_zero = (f.exp == '0);
    mag     = is_zero ? '0 : {1'b1, f.frac, {PAD_W{1'b0}}};
    mant    = f.sign ? -mant_t'({1'b0, mag}) : mant_t'({1'b0, mag});
    exp     = f.exp;
  end

endmodule
