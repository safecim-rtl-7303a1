// tb_global_align: checks the global alignment of the two 28-bit group sums
// of a column to the larger group exponent. Random group sums and exponents
// (narrow and wide spreads, so offsets of 0, small, above 28 and above 31
// all occur) are applied; the global maximum, each saturated offset and each
// arithmetically shifted sum are compared with 64-bit reference arithmetic.
module tb_global_align;
  import safecim_pkg::*;
  import safecim_ref_pkg::*;

  localparam int N = 2;
  localparam int DW = PROD_W + 2;
  logic signed [DW-1:0] din [N], dout [N];
  esum_t            ein [N], emax;
  logic [OFF_W-1:0] offset [N];
  int               checks = 0, failures = 0;
  int               n_sat = 0, n_zero_off = 0;

  global_align #(.NG(N), .DATA_W(DW)) dut (.sum_in(din), .exp_in(ein), .sum_out(dout), .gmax(emax), .offset(offset));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      int spread, base, m;
      spread = (t % 3 == 0) ? 60 : ((t % 3 == 1) ? 8 : 30);
      base   = int'($urandom_range(0, 508 - spread));
      for (int i = 0; i < N; i++) begin
        din[i] = DW'($signed(28'($urandom)) >>> $urandom_range(0, 8));
        ein[i] = esum_t'(base + int'($urandom_range(0, spread)));
      end
      #1;
      m = int'(ein[0]);
      for (int i = 1; i < N; i++) if (int'(ein[i]) > m) m = int'(ein[i]);
      checks++;
      if (int'(emax) != m) failures++;
      for (int i = 0; i < N; i++) begin
        int off, offs;
        off  = m - int'(ein[i]);
        offs = (off > 31) ? 31 : off;
        if (off > 31) n_sat++;
        if (off == 0) n_zero_off++;
        checks++;
        if (int'(offset[i]) != offs || longint'(dout[i]) != asr(longint'(din[i]), off)) begin
          failures++;
          if (failures < 10)
            $display("FAIL din=%0d ein=%0d emax=%0d off=%0d dout=%0d expected %0d", din[i], ein[i],
                     m, offset[i], dout[i], asr(longint'(din[i]), off));
        end
      end
    end
    checks++;
    if (n_sat == 0 || n_zero_off == 0) begin
      failures++;
      $display("FAIL offset cases not exercised: sat=%0d zero=%0d", n_sat, n_zero_off);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
