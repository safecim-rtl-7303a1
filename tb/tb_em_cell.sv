// tb_em_cell: checks the elementwise multiplier and memory cell.
// Random BFLOAT16 weights are programmed, then random inputs are applied;
// the 26-bit product must equal the product of the two reference mantissas
// and the exponent sum must be Ex + Ew (0 when either operand is zero). It
// also checks that the weight holds while w_we is low and that reset clears
// it to zero.
module tb_em_cell;
  import safecim_pkg::*;
  import safecim_ref_pkg::*;

  logic  clk = 0, rst_n = 0;
  logic  w_we;
  bf16_t w_data, xv, wref;
  mant_t x_mant;
  logic [7:0] x_exp;
  logic  x_zero;
  prod_t prod;
  esum_t esum;
  int    checks = 0, failures = 0;

  always #5 clk = ~clk;

  bf16_decode u_xd (.x(xv), .mant(x_mant), .exp(x_exp), .is_zero(x_zero));
  em_cell dut (.clk, .rst_n, .w_we, .w_data, .x_mant, .x_exp, .x_zero, .prod, .esum);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bf16_t x, bf16_t w);
    checks++;
    if (longint'(prod) != ref_mant(x) * ref_mant(w) || int'(esum) != ref_esum(x, w)) begin
      failures++;
      if (failures < 10)
        $display("FAIL x=%h w=%h prod=%0d esum=%0d expected %0d %0d", x, w, prod, esum,
                 ref_mant(x) * ref_mant(w), ref_esum(x, w));
    end
  endtask

  initial begin
    w_we = 0; w_data = '0; xv = 16'h3F80;
    repeat (2) @(posedge clk);
    #1;
    check(xv, 16'h0000);            // reset value is zero
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      wref   = (t % 17 == 0) ? 16'h0000 : rand_bf16(1, 254);
      w_data = wref; w_we = 1;
      @(negedge clk);
      w_we = 0; w_data = rand_bf16(1, 254);   // must not be stored
      for (int k = 0; k < 4; k++) begin
        xv = (k == 3 && t % 5 == 0) ? 16'h8000 : rand_bf16(1, 254);
        #1;
        check(xv, wref);
        @(negedge clk);
      end
    end
    // extremes: largest magnitudes of both signs
    @(negedge clk); w_data = 16'hFF7F; w_we = 1; @(negedge clk); w_we = 0;
    xv = 16'h7F7F; #1; check(xv, 16'hFF7F);
    xv = 16'hFF7F; #1; check(xv, 16'hFF7F);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
