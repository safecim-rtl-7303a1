// tb_bf16_decode: exhaustive check of the BFLOAT16 operand decoder.
// Every one of the 65536 codes is applied; the 13-bit mantissa must equal
// (-1)^s * {1, M, 0000} (zero for exponent 0), the exponent must pass through
// and is_zero must flag exponent 0.
module tb_bf16_decode;
  import safecim_pkg::*;
  import safecim_ref_pkg::*;

  bf16_t      x;
  mant_t      mant;
  logic [7:0] exp;
  logic       is_zero;
  int         checks = 0, failures = 0;

  bf16_decode dut (.x(x), .mant(mant), .exp(exp), .is_zero(is_zero));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 65536; v++) begin
      x = 16'(v);
      #1;
      checks++;
      if (longint'(mant) != ref_mant(x) || exp != x[14:7] || is_zero != (x[14:7] == 0)) begin
        failures++;
        if (failures < 10)
          $display("FAIL x=%h mant=%0d exp=%0d zero=%0b expected mant=%0d", x, mant, exp, is_zero, ref_mant(x));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
