// norm_round: normalization and rounding ("N & R") of a signed mantissa sum
// into a BFLOAT16 value.
//
// Input: a SUM_W-bit two's-complement sum and an exponent e, meaning the
// value sum * 2^(e - EXP_OFFSET - 127). As the published design describes,
// the sign is split off and the sum becomes an unsigned magnitude; the
// magnitude is shifted so that its leading one lands in the 1.M position; the
// shift distance moves the exponent, giving biased exponent
// L + e - EXP_OFFSET where L is the leading-one position; and the seven bits
// below the leading one form the BFLOAT16 fraction.
//
// Own choices where the published text is silent: the dropped bits round to
// nearest, ties to even, when ROUND_NE = 1 (the figure names this stage
// "normalization and rounding"; with ROUND_NE = 0 the fraction is simply the
// seven extracted bits); a rounding carry bumps the exponent; a zero sum
// gives +0; an exponent of 0 or below flushes to signed zero; an exponent of
// 255 or more saturates to signed infinity.
//
// Interface: purely combinational. SUM_W must be at least 10.
module norm_round
  import safecim_pkg::*;
#(
  parameter int unsigned SUM_W      = PROD_W + 3,
  parameter int unsigned EIN_W      = ESUM_W,
  parameter int          EXP_OFFSET = TILE_NORM_OFFSET,
  parameter bit          ROUND_NE   = 1'b1
) (
  input  logic signed [SUM_W-1:0] sum,
  input  logic        [EIN_W-1:0] exp_in,
  output bf16_t                   result
);

  logic             sgn;
  logic [SUM_W-1:0] mag;
  logic [SUM_W-1:0] norm;
  int unsigned      lead;
  logic [6:0]       frac;
  logic             guard, sticky, round_up;
  logic [7:0]       frac_r;
  int               exp_int;

  always_comb begin
    sgn  = sum[SUM_W-1];
    mag  = sgn ? SUM_W'(-sum) : SUM_W'(sum);
    lead = 0;
    for (int i = 0; i < SUM_W; i++)
      if (mag[i]) lead = i;
    norm     = mag << (SUM_W - 1 - lead);
    frac     = norm[SUM_W-2 -: 7];
    guard    = norm[SUM_W-9];
    sticky   = |norm[SUM_W-10:0];
    round_up = ROUND_NE && guard && (sticky || frac[0]);
    frac_r   = {1'b0, frac} + 8'(round_up);
    exp_int  = int'(lead) + int'(exp_in) - EXP_OFFSET + int'(frac_r[7]);
    if (mag == '0)
      result = 16'h0000;
    else if (exp_int <= 0)
      result = {sgn, 15'h0000};
    else if (exp_int >= 255)
      result = {sgn, 8'hFF, 7'h00};
    else
      result = {sgn, exp_int[7:0], frac_r[6:0]};
  end

endmodule
