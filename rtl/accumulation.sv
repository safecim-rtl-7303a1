// accumulation: the stage after the partitions' normalization units.
//
// Because IC = ic * H, the dot product for one output column is split over
// the H partitions stacked along the input dimension; each delivers a
// BFLOAT16 partial sum. Per output column this unit adds the H partial sums
// with a binary tree of BFLOAT16 adders (partition 0 + 1, 2 + 3, ...; H is
// padded with zeros up to a power of two) and adds the tree result into a
// running BFLOAT16 accumulator, so partial sums of successive input vectors
// (longer input channels than the array holds) add up. A vector with
// in_first set starts a new accumulation instead of adding to the old one.
//
// The published design names this stage and shows where it sits; its
// insides (adder tree order, BFLOAT16 accumulator, first flag) are this
// design's choice.
//
// Timing: acc/out_valid are registered, one clock after in_valid.
module accumulation
  import safecim_pkg::*;
#(
  parameter int unsigned H  = H_T,
  parameter int unsigned OC = OC_T * W_T,
  localparam int unsigned L  = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned HP = 1 << L
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  bf16_t part [H][OC],
  output logic  out_valid,
  output bf16_t acc  [OC]
);

  bf16_t acc_sum [OC];
  bf16_t tree_sum[OC];

  for (genvar c = 0; c < OC; c++) begin : g_col
    for (genvar l = 0; l <= L; l++) begin : g_lvl
      bf16_t v [HP >> l];
      for (genvar i = 0; i < (HP >> l); i++) begin : g_n
        if (l == 0) begin : g_leaf
          assign v[i] = (i < H) ? part[i][c] : 16'h0000;
        end else begin : g_add
          bf16_add u_add (.a(g_lvl[l-1].v[2*i]), .b(g_lvl[l-1].v[2*i+1]), .y(v[i]));
        end
      end
    end
    assign tree_sum[c] = g_lvl[L].v[0];
    bf16_add u_acc (.a(acc[c]), .b(tree_sum[c]), .y(acc_sum[c]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int c = 0; c < OC; c++) acc[c] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int c = 0; c < OC; c++)
          acc[c] <= in_first ? tree_sum[c] : acc_sum[c];
    end
  end

endmodule
