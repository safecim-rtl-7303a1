// global_align: alignment of the group sums inside the adder tree.
//
// After the first log2(GROUP) adder levels each group sum still carries its
// own group exponent. This unit finds the largest of the NG group exponents
// (the column's global maximum), computes each group's offset from it and
// arithmetic-right-shifts the group sum by that offset. The remaining adder
// levels then add integers that share one exponent. This two-step (local,
// then global) alignment is the published design's; the 5-bit saturating
// offset is this design's choice (the published fault study describes its
// global offsets as 4-bit unsigned integers for the pre-aligned baseline,
// whose words are shorter).
//
// Interface: purely combinational.
module global_align
  import safecim_pkg::*;
#(
  parameter int unsigned NG     = IC_T / GROUP,
  parameter int unsigned DATA_W = PROD_W + $clog2(GROUP)
) (
  input  logic signed [DATA_W-1:0] sum_in [NG],
  input  esum_t                    exp_in [NG],
  output logic signed [DATA_W-1:0] sum_out[NG],
  output esum_t                    gmax,
  output logic        [OFF_W-1:0]  offset [NG]
);

  always_comb begin
    gmax = exp_in[0];
    for (int g = 1; g < NG; g++)
      if (exp_in[g] > gmax) gmax = exp_in[g];
    for (int g = 0; g < NG; g++) begin
      esum_t diff;
      diff = gmax - exp_in[g];
      offset[g]  = (diff > esum_t'((1 << OFF_W) - 1)) ? {OFF_W{1'b1}} : diff[OFF_W-1:0];
      sum_out[g] = sum_in[g] >>> offset[g];
    end
  end

endmodule
