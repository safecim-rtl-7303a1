// tb_adder_tree: checks the per-column adder tree with global alignment
// (8 inputs, groups of 4). Random locally aligned 26-bit products and random
// group exponents are applied; the 29-bit column sum must equal
// sum over groups of ((group sum) >>> (global max - group exponent)), and
// the exponent output must be the global maximum. Extreme inputs (all
// maximum positive, all maximum negative) check that no level overflows.
module tb_adder_tree;
  import safecim_pkg::*;
  import safecim_ref_pkg::*;

  localparam int IC = 8, GRP = 4, NG = 2, SUM_W = PROD_W + 3;
  prod_t                   prod_in [IC];
  esum_t                   gexp [NG];
  logic signed [SUM_W-1:0] sum;
  esum_t                   exp_out;
  int                      checks = 0, failures = 0, n_gshift = 0;

  adder_tree #(.IC(IC), .GRP(GRP), .IN_W(PROD_W)) dut (.prod_in, .gexp, .sum, .exp_out);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    longint gs [NG];
    longint exp_sum;
    int     gm;
    #1;
    gm = int'(gexp[0]);
    for (int g = 1; g < NG; g++) if (int'(gexp[g]) > gm) gm = int'(gexp[g]);
    exp_sum = 0;
    for (int g = 0; g < NG; g++) begin
      gs[g] = 0;
      for (int k = 0; k < GRP; k++) gs[g] += longint'(prod_in[g*GRP+k]);
      if (gm > int'(gexp[g]) && gs[g] != 0) n_gshift++;
      exp_sum += asr(gs[g], gm - int'(gexp[g]));
    end
    checks++;
    if (longint'(sum) != exp_sum || int'(exp_out) != gm) begin
      failures++;
      if (failures < 10) $display("FAIL sum=%0d exp=%0d expected %0d %0d", sum, exp_out, exp_sum, gm);
    end
  endtask

  initial begin
    for (int t = 0; t < 20000; t++) begin
      for (int i = 0; i < IC; i++) prod_in[i] = prod_t'($signed(26'($urandom)) >>> $urandom_range(0, 12));
      for (int g = 0; g < NG; g++) gexp[g] = esum_t'($urandom_range(200, 200 + ((t % 2) ? 4 : 40)));
      check();
    end
    for (int i = 0; i < IC; i++) prod_in[i] = prod_t'({1'b0, {(PROD_W-1){1'b1}}});
    gexp[0] = 9'd100; gexp[1] = 9'd100;
    check();
    for (int i = 0; i < IC; i++) prod_in[i] = prod_t'({1'b1, {(PROD_W-1){1'b0}}});
    check();
    checks++;
    if (n_gshift == 0) begin failures++; $display("FAIL global shift never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
