// tb_norm_round: checks normalization and rounding of a 29-bit signed sum
// with a 9-bit exponent into BFLOAT16. The expected word is computed from
// the exact value sum * 2^(exp - 276) held in a double, rounded to nearest
// even (default instance) or truncated (second instance, ROUND_NE = 0),
// with flush to zero below the normal range and saturation to infinity
// above it. Sums are drawn at all magnitudes, including runs of ones that
// force a rounding carry into the exponent; each of round-up, carry, flush,
// overflow, zero and negative results must occur.
module tb_norm_round;
  import safecim_pkg::*;
  import safecim_ref_pkg::*;

  localparam int SUM_W = PROD_W + 3;
  logic signed [SUM_W-1:0] sum;
  esum_t                   exp_in;
  bf16_t                   res_rne, res_trn, e_rne, e_trn;
  int                      checks = 0, failures = 0;

  norm_round #(.SUM_W(SUM_W), .EIN_W(ESUM_W), .EXP_OFFSET(TILE_NORM_OFFSET), .ROUND_NE(1'b1))
    dut (.sum, .exp_in, .result(res_rne));
  norm_round #(.SUM_W(SUM_W), .EIN_W(ESUM_W), .EXP_OFFSET(TILE_NORM_OFFSET), .ROUND_NE(1'b0))
    dut_trunc (.sum, .exp_in, .result(res_trn));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear_counters();
    for (int t = 0; t < 40000; t++) begin
      int sh;
      sh = int'($urandom_range(0, SUM_W - 1));
      case (t % 4)
        0: sum = SUM_W'($signed(29'($urandom)) >>> sh);
        1: sum = SUM_W'(($urandom_range(0, 1) ? -1 : 1) * ((longint'(1) << (sh % 28 + 1)) - 1));
        2: sum = SUM_W'($signed(29'($urandom)));
        default: sum = (t % 40 == 3) ? '0 : SUM_W'($signed(29'($urandom)) >>> 20);
      endcase
      exp_in = (t % 8 == 0) ? esum_t'($urandom) : esum_t'($urandom_range(200, 300));
      #1;
      e_trn = real_to_bf16(real'(sum) * pow2(int'(exp_in) - 276), 1'b0);
      e_rne = real_to_bf16(real'(sum) * pow2(int'(exp_in) - 276), 1'b1);
      checks += 2;
      if (res_rne != e_rne) begin
        failures++;
        if (failures < 10) $display("FAIL rne sum=%0d exp=%0d got %h expected %h", sum, exp_in, res_rne, e_rne);
      end
      if (res_trn != e_trn) begin
        failures++;
        if (failures < 10) $display("FAIL trunc sum=%0d exp=%0d got %h expected %h", sum, exp_in, res_trn, e_trn);
      end
    end
    checks++;
    if (n_round_up == 0 || n_round_carry == 0 || n_flush == 0 || n_overflow == 0 || n_zero == 0 || n_negative == 0) begin
      failures++;
      $display("FAIL coverage up=%0d carry=%0d flush=%0d ovf=%0d zero=%0d neg=%0d",
               n_round_up, n_round_carry, n_flush, n_overflow, n_zero, n_negative);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
