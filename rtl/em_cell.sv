// em_cell: one elementwise-multiplier-and-memory cell of the CiM array.
//
// The memory part holds one programmed weight in decoded form: its 13-bit
// two's-complement mantissa, its 8-bit exponent and a zero flag. A write
// (w_we) decodes a BFLOAT16 weight and stores it at the next clock edge.
// The multiplier part is combinational: it multiplies the stored mantissa by
// the input mantissa into a 26-bit signed product and adds the two exponents
// into a 9-bit exponent sum.
//
// Following the published design, weights keep their own exponent (post-
// alignment: nothing is shifted before the multiply). Own choices: reset
// clears the weight to zero; the exponent sum of a product with a zero
// operand is forced to 0, so a zero can never become the group maximum and
// push real products out during alignment.
module em_cell
  import safecim_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // programming port
  input  logic       w_we,
  input  bf16_t      w_data,
  // multiply port
  input  mant_t      x_mant,
  input  logic [7:0] x_exp,
  input  logic       x_zero,
  output prod_t      prod,
  output esum_t      esum
);

  mant_t      w_mant_q;
  logic [7:0] w_exp_q;
  logic       w_zero_q;

  mant_t      w_mant_d;
  logic [7:0] w_exp_d;
  logic       w_zero_d;

  bf16_decode u_dec (.x(w_data), .mant(w_mant_d), .exp(w_exp_d), .is_zero(w_zero_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_mant_q <= '0;
      w_exp_q  <= '0;
      w_zero_q <= 1'b1;
    end else if (w_we) begin
      w_mant_q <= w_mant_d;
      w_exp_q  <= w_exp_d;
      w_zero_q <= w_zero_d;
    end
  end

  always_comb begin
    prod = prod_t'(x_mant) * prod_t'(w_mant_q);
    esum = (x_zero || w_zero_q) ? '0 : esum_t'(x_exp) + esum_t'(w_exp_q);
  end

endmodule
