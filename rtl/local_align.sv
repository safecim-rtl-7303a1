// local_align: post-multiplication alignment of one group of products.
//
// A group is GROUP consecutive products of one crossbar column (4 in the
// published configuration). The unit finds the largest exponent sum in the
// group, computes each product's offset from it, and arithmetic-right-shifts
// the product by that offset, so all products of the group share the group
// maximum exponent and can be added as integers. Bits shifted out are
// dropped (truncation toward minus infinity).
//
// Offsets are OFF_W = 5 bits wide and saturate at 31; any offset of 26 or
// more already leaves only sign bits of a 26-bit product, so saturation never
// changes a result. The offset width is this design's choice.
//
// Interface: purely combinational.
module local_align
  import safecim_pkg::*;
#(
  parameter int unsigned N      = GROUP,
  parameter int unsigned DATA_W = PROD_W
) (
  input  logic signed [DATA_W-1:0] din   [N],
  input  esum_t                    ein   [N],
  output logic signed [DATA_W-1:0] dout  [N],
  output esum_t                    emax,
  output logic        [OFF_W-1:0]  offset[N]
);

  always_comb begin
    emax = ein[0];
    for (int i = 1; i < N; i++)
      if (ein[i] > emax) emax = ein[i];
    for (int i = 0; i < N; i++) begin
      esum_t diff;
      diff = emax - ein[i];
      offset[i] = (diff > esum_t'((1 << OFF_W) - 1)) ? {OFF_W{1'b1}} : diff[OFF_W-1:0];
      dout[i]   = din[i] >>> offset[i];
    end
  end

endmodule
