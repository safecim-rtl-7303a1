// bf16_add: BFLOAT16 adder used by the accumulation stage.
//
// Both operands are expanded to 8-bit significands (hidden one included),
// the one with the smaller exponent is shifted right against GUARD extra
// fraction bits, the two are added as signed integers, and norm_round packs
// the result with round-to-nearest-even. With GUARD = 16 the result is the
// correctly rounded sum of two normal operands. Zeros and subnormals count as
// zero (flushed), and an infinity or NaN operand is passed through unchanged
// (operand a first). The published design only names the accumulation stage;
// this adder is this design's own construction.
//
// Interface: purely combinational.
module bf16_add
  import safecim_pkg::*;
#(
  parameter int unsigned GUARD = 16,
  localparam int unsigned X_W  = 8 + GUARD + 2
) (
  input  bf16_t a,
  input  bf16_t b,
  output bf16_t y
);

  bf16_fields_t fa, fb;
  logic [7:0]   emax;
  logic [7:0]   da, db;
  logic [8+GUARD-1:0] ma, mb;
  logic signed [X_W-1:0] xa, xb, xs;
  bf16_t        nr;

  always_comb begin
    fa   = bf16_fields_t'(a);
    fb   = bf16_fields_t'(b);
    emax = (fa.exp > fb.exp) ? fa.exp : fb.exp;
    da   = emax - fa.exp;
    db   = emax - fb.exp;
    ma   = (fa.exp == '0) ? '0 : {1'b1, fa.frac, {GUARD{1'b0}}};
    mb   = (fb.exp == '0) ? '0 : {1'b1, fb.frac, {GUARD{1'b0}}};
    ma   = (da >= 8'(8 + GUARD)) ? '0 : ma >> da;
    mb   = (db >= 8'(8 + GUARD)) ? '0 : mb >> db;
    xa   = fa.sign ? -X_W'(ma) : X_W'(ma);
    xb   = fb.sign ? -X_W'(mb) : X_W'(mb);
    xs   = xa + xb;
  end

  norm_round #(.SUM_W(X_W), .EIN_W(8), .EXP_OFFSET(7 + GUARD), .ROUND_NE(1'b1)) u_nr (
    .sum(xs), .exp_in(emax), .result(nr)
  );

  always_comb begin
    if (fa.exp == 8'hFF)      y = a;
    else if (fb.exp == 8'hFF) y = b;
    else                      y = nr;
  end

endmodule
