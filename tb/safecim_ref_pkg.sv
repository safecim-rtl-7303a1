// safecim_ref_pkg: reference arithmetic for the SafeCiM testbenches.
//
// Written independently of the RTL: BFLOAT16 rounding is done on the IEEE
// double that holds the exact value (real_to_bf16), integer alignment uses
// 64-bit arithmetic, and adds of two BFLOAT16 values go through doubles. The
// column model follows the published dataflow: 13-bit signed mantissas,
// 26-bit products, alignment to the group maximum exponent sum, group sums,
// alignment to the global maximum, one column sum, normalization.
// Counters record how often the mechanisms under test occurred, so
// testbenches can require that each one was exercised.
package safecim_ref_pkg;

  int unsigned n_local_shift;   // product shifted by a nonzero local offset
  int unsigned n_shift_out;     // product shifted past its width
  int unsigned n_global_shift;  // group sum shifted by a nonzero global offset
  int unsigned n_round_up;      // rounding incremented the fraction
  int unsigned n_round_carry;   // rounding carried into the exponent
  int unsigned n_flush;         // result flushed to zero (underflow)
  int unsigned n_overflow;      // result saturated to infinity
  int unsigned n_negative;      // negative nonzero result
  int unsigned n_zero;          // exactly zero result

  function automatic void clear_counters();
    n_local_shift = 0; n_shift_out = 0; n_global_shift = 0; n_round_up = 0;
    n_round_carry = 0; n_flush = 0; n_overflow = 0; n_negative = 0; n_zero = 0;
  endfunction

  function automatic real pow2(int n);
    real r = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) r = r * 2.0;
    else        for (int i = 0; i < -n; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real bf16_to_real(logic [15:0] v);
    int e = int'(v[14:7]);
    real m;
    if (e == 0) return 0.0;
    m = 1.0 + real'(int'(v[6:0])) / 128.0;
    m = m * pow2(e - 127);
    return v[15] ? -m : m;
  endfunction

  // Round an exact double to BFLOAT16: nearest-even (rne=1) or truncate,
  // flush results below the normal range to signed zero, saturate to inf.
  function automatic logic [15:0] real_to_bf16(real r, bit rne);
    logic [63:0] b;
    int          eb;
    logic [7:0]  m8;
    bit          g, st, up;
    if (r == 0.0) begin n_zero++; return 16'h0000; end
    b  = $realtobits(r);
    eb = int'(b[62:52]) - 1023 + 127;
    g  = b[44];
    st = |b[43:0];
    up = rne && g && (st || b[45]);
    m8 = {1'b0, b[51:45]} + 8'(up);
    if (up) n_round_up++;
    if (m8[7]) begin eb++; n_round_carry++; end
    if (b[63]) n_negative++;
    if (eb <= 0)   begin n_flush++;    return {b[63], 15'h0}; end
    if (eb >= 255) begin n_overflow++; return {b[63], 8'hFF, 7'h0}; end
    return {b[63], 8'(eb), m8[6:0]};
  endfunction

  function automatic logic [15:0] ref_bf16_add(logic [15:0] a, logic [15:0] b);
    if (a[14:7] == 8'hFF) return a;
    if (b[14:7] == 8'hFF) return b;
    return real_to_bf16(bf16_to_real(a) + bf16_to_real(b), 1'b1);
  endfunction

  // decoded mantissa: (-1)^s * {1, M, 0000}, zero for exponent 0
  function automatic longint ref_mant(logic [15:0] v);
    longint mag;
    if (v[14:7] == 0) return 0;
    mag = (128 + longint'(v[6:0])) * 16;
    return v[15] ? -mag : mag;
  endfunction

  function automatic int ref_esum(logic [15:0] x, logic [15:0] w);
    if (x[14:7] == 0 || w[14:7] == 0) return 0;
    return int'(x[14:7]) + int'(w[14:7]);
  endfunction

  function automatic longint asr(longint v, int sh);
    if (sh > 31) sh = 31;
    return v >>> sh;
  endfunction

  // One column of one partition: n inputs, alignment groups of grp.
  // Returns the BFLOAT16 partial sum; also the raw sum and exponent.
  function automatic logic [15:0] ref_column(input logic [15:0] x[], input logic [15:0] w[],
                                             input int grp, input bit rne,
                                             output longint sum, output int gexp);
    int     n = x.size();
    int     ng = n / grp;
    longint gs[];
    int     ge[];
    gs = new[ng];
    ge = new[ng];
    for (int g = 0; g < ng; g++) begin
      int m = 0;
      for (int k = 0; k < grp; k++) begin
        int e = ref_esum(x[g*grp+k], w[g*grp+k]);
        if (k == 0 || e > m) m = e;
      end
      ge[g] = m;
      gs[g] = 0;
      for (int k = 0; k < grp; k++) begin
        longint p = ref_mant(x[g*grp+k]) * ref_mant(w[g*grp+k]);
        int     off = m - ref_esum(x[g*grp+k], w[g*grp+k]);
        if (p != 0 && off > 0)  n_local_shift++;
        if (p != 0 && off >= 26) n_shift_out++;
        gs[g] += asr(p, off);
      end
    end
    gexp = ge[0];
    for (int g = 1; g < ng; g++) if (ge[g] > gexp) gexp = ge[g];
    sum = 0;
    for (int g = 0; g < ng; g++) begin
      if (gs[g] != 0 && gexp > ge[g]) n_global_shift++;
      sum += asr(gs[g], gexp - ge[g]);
    end
    return real_to_bf16(real'(sum) * pow2(gexp - 276), rne);
  endfunction

  // Random BFLOAT16 with exponent in [emin, emax] and random sign/fraction.
  function automatic logic [15:0] rand_bf16(int emin, int emax);
    int e = emin + int'($urandom_range(0, emax - emin));
    return {1'($urandom), 8'(e), 7'($urandom)};
  endfunction

endpackage
