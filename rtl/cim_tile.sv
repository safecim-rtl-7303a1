// cim_tile: one ic x oc partition of the SafeCiM array, with its own adder
// trees and its own normalization-and-rounding stage.
//
// Dataflow per input vector (IC BFLOAT16 activations, one per row):
//   1. every row's activation is decoded once and broadcast along the row;
//      each EM cell multiplies it by its stored weight (26-bit product,
//      9-bit exponent sum)                                 -> register
//   2. per column, products are aligned in groups of GRP (local_align) and
//      summed by adder_tree, which realigns the group sums (global
//      alignment) before its last level                   -> register
//   3. per column, norm_round packs the sum into BFLOAT16  -> register
// The partition geometry (ic = 8, oc = 4), post-alignment, group size 4 and
// three adder levels follow the published design; the three pipeline
// registers and their placement are this design's choice.
//
// Timing: one vector per clock; psum/out_valid appear 3 clocks after
// in_valid. in_first travels with the vector (for the accumulator).
// Weights are written one cell per clock through w_we/w_row/w_col/w_data and
// are used from the next clock on.
module cim_tile
  import safecim_pkg::*;
#(
  parameter int unsigned IC       = IC_T,
  parameter int unsigned OC       = OC_T,
  parameter int unsigned GRP      = GROUP,
  parameter bit          ROUND_NE = 1'b1,
  localparam int unsigned NG      = IC / GRP,
  localparam int unsigned SUM_W   = PROD_W + $clog2(IC),
  localparam int unsigned RA_W    = (IC > 1) ? $clog2(IC) : 1,
  localparam int unsigned CA_W    = (OC > 1) ? $clog2(OC) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // weight programming
  input  logic            w_we,
  input  logic [RA_W-1:0] w_row,
  input  logic [CA_W-1:0] w_col,
  input  bf16_t           w_data,
  // activations
  input  logic            in_valid,
  input  logic            in_first,
  input  bf16_t           x [IC],
  // partial sums
  output logic            out_valid,
  output logic            out_first,
  output bf16_t           psum [OC]
);

  initial begin
    assert (IC % GRP == 0) else $error("IC must be a multiple of GRP");
  end

  // ---------------- stage 1: decode + EM array -------------------------
  mant_t      x_mant [IC];
  logic [7:0] x_exp  [IC];
  logic       x_zero [IC];
  prod_t      prod   [IC][OC];
  esum_t      esum   [IC][OC];

  for (genvar r = 0; r < IC; r++) begin : g_row
    bf16_decode u_dec (.x(x[r]), .mant(x_mant[r]), .exp(x_exp[r]), .is_zero(x_zero[r]));
    for (genvar c = 0; c < OC; c++) begin : g_col
      em_cell u_em (
        .clk   (clk),
        .rst_n (rst_n),
        .w_we  (w_we && (w_row == RA_W'(r)) && (w_col == CA_W'(c))),
        .w_data(w_data),
        .x_mant(x_mant[r]),
        .x_exp (x_exp[r]),
        .x_zero(x_zero[r]),
        .prod  (prod[r][c]),
        .esum  (esum[r][c])
      );
    end
  end

  prod_t s1_prod [IC][OC];
  esum_t s1_esum [IC][OC];
  logic  s1_valid, s1_first;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
    end else begin
      s1_valid <= in_valid;
      s1_first <= in_first;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_prod <= prod;
      s1_esum <= esum;
    end
  end

  // ---------------- stage 2: local alignment + adder tree ---------------
  logic signed [SUM_W-1:0] col_sum [OC];
  esum_t                   col_exp [OC];

  for (genvar c = 0; c < OC; c++) begin : g_tree
    prod_t                 al_prod [IC];
    esum_t                 g_emax  [NG];
    for (genvar g = 0; g < NG; g++) begin : g_grp
      prod_t               gp_in  [GRP];
      esum_t               ge_in  [GRP];
      prod_t               gp_out [GRP];
      logic [OFF_W-1:0]    g_off  [GRP];
      for (genvar k = 0; k < GRP; k++) begin : g_k
        assign gp_in[k] = s1_prod[g*GRP + k][c];
        assign ge_in[k] = s1_esum[g*GRP + k][c];
        assign al_prod[g*GRP + k] = gp_out[k];
      end
      local_align #(.N(GRP), .DATA_W(PROD_W)) u_lal (
        .din(gp_in), .ein(ge_in), .dout(gp_out), .emax(g_emax[g]), .offset(g_off)
      );
    end
    adder_tree #(.IC(IC), .GRP(GRP), .IN_W(PROD_W)) u_at (
      .prod_in(al_prod), .gexp(g_emax), .sum(col_sum[c]), .exp_out(col_exp[c])
    );
  end

  logic signed [SUM_W-1:0] s2_sum [OC];
  esum_t                   s2_exp [OC];
  logic                    s2_valid, s2_first;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s2_first <= 1'b0;
    end else begin
      s2_valid <= s1_valid;
      s2_first <= s1_first;
    end
  end

  always_ff @(posedge clk) begin
    if (s1_valid) begin
      s2_sum <= col_sum;
      s2_exp <= col_exp;
    end
  end

  // ---------------- stage 3: normalization and rounding -----------------
  bf16_t nr_out [OC];
  for (genvar c = 0; c < OC; c++) begin : g_nr
    norm_round #(.SUM_W(SUM_W), .EIN_W(ESUM_W), .EXP_OFFSET(TILE_NORM_OFFSET),
                 .ROUND_NE(ROUND_NE)) u_nr (
      .sum(s2_sum[c]), .exp_in(s2_exp[c]), .result(nr_out[c])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      for (int c = 0; c < OC; c++) psum[c] <= '0;
    end else begin
      out_valid <= s2_valid;
      out_first <= s2_first;
      if (s2_valid) psum <= nr_out;
    end
  end

endmodule
