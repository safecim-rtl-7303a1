// adder_tree: the per-column adder tree ("AT") of one CiM partition, with
// global alignment inside it.
//
// The IC locally aligned products of a column enter as IC leaves. The first
// log2(GROUP) binary levels add products of the same alignment group only,
// giving one sum per group (levels 1 and 2 in the published 8-input, group-4
// configuration). Those NG group sums, each still tied to its group exponent,
// go through global_align, and the last log2(IC/GROUP) levels add the aligned
// group sums into the column sum (level 3). The column sum is SUM_W =
// PROD_W + log2(IC) = 29 bits, and its exponent is the global maximum.
//
// Every tree node is kept SUM_W bits wide; an adder at level k never needs
// more than PROD_W + k bits, so the wider nodes only add sign bits.
//
// Interface: purely combinational.
module adder_tree
  import safecim_pkg::*;
#(
  parameter int unsigned IC   = IC_T,
  parameter int unsigned GRP  = GROUP,
  parameter int unsigned IN_W = PROD_W,
  localparam int unsigned NG    = IC / GRP,
  localparam int unsigned L_LOC = $clog2(GRP),
  localparam int unsigned L_ALL = $clog2(IC),
  localparam int unsigned GS_W  = IN_W + L_LOC,
  localparam int unsigned SUM_W = IN_W + L_ALL
) (
  input  logic signed [IN_W-1:0]  prod_in[IC],   // locally aligned products
  input  esum_t                   gexp   [NG],   // exponent of each group
  output logic signed [SUM_W-1:0] sum,
  output esum_t                   exp_out
);

  // node[l][i]: output i of level l (level 0 = leaves)
  logic signed [SUM_W-1:0] node [L_ALL+1][IC];
  logic signed [GS_W-1:0]  gsum    [NG];
  logic signed [GS_W-1:0]  gsum_al [NG];
  logic        [OFF_W-1:0] goff    [NG];
  esum_t                   gmax;

  // levels 1 .. L_LOC: inside each group
  always_comb begin
    for (int l = 0; l <= L_ALL; l++)
      for (int i = 0; i < IC; i++)
        node[l][i] = '0;
    for (int i = 0; i < IC; i++)
      node[0][i] = SUM_W'(prod_in[i]);
    for (int l = 1; l <= L_LOC; l++)
      for (int i = 0; i < (IC >> l); i++)
        node[l][i] = node[l-1][2*i] + node[l-1][2*i+1];
    for (int g = 0; g < NG; g++)
      gsum[g] = node[L_LOC][g][GS_W-1:0];
  end

  global_align #(.NG(NG), .DATA_W(GS_W)) u_galign (
    .sum_in (gsum),
    .exp_in (gexp),
    .sum_out(gsum_al),
    .gmax   (gmax),
    .offset (goff)
  );

  // levels L_LOC+1 .. L_ALL: across groups
  logic signed [SUM_W-1:0] up [L_ALL+1][NG];
  always_comb begin
    for (int l = 0; l <= L_ALL; l++)
      for (int g = 0; g < NG; g++)
        up[l][g] = '0;
    for (int g = 0; g < NG; g++)
      up[L_LOC][g] = SUM_W'(gsum_al[g]);
    for (int l = L_LOC + 1; l <= L_ALL; l++)
      for (int i = 0; i < (IC >> l); i++)
        up[l][i] = up[l-1][2*i] + up[l-1][2*i+1];
    sum     = up[L_ALL][0];
    exp_out = gmax;
  end

endmodule
