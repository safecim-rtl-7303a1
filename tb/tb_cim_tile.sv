// tb_cim_tile: checks one 8 x 4 partition end to end: weight programming,
// EM products, local alignment in groups of 4, adder tree with global
// alignment, and normalization/rounding, against the column reference model.
// Vectors are streamed back to back (one per clock) and each result must
// appear exactly 3 clocks after its input; a reprogramming of the weights in
// the middle of the run checks that new weights take effect. Input sets mix
// narrow and wide exponent spreads and zeros so that nonzero local and
// global offsets and fully shifted-out products all occur. A double-
// precision dot product bounds the numerical error of every nonzero result.
module tb_cim_tile;
  import safecim_pkg::*;
  import safecim_ref_pkg::*;

  localparam int IC = 8, OC = 4, GRP = 4, LAT = 3, NVEC = 3000;

  logic        clk = 0, rst_n = 0;
  logic        w_we = 0;
  logic [2:0]  w_row = '0;
  logic [1:0]  w_col = '0;
  bf16_t       w_data = '0;
  logic        in_valid = 0, in_first = 0;
  bf16_t       x [IC];
  logic        out_valid, out_first;
  bf16_t       psum [OC];
  int          checks = 0, failures = 0;

  bf16_t       wmem [IC][OC];
  bf16_t       exp_q [$];
  int          cyc_q [$];
  int          cycle = 0;
  int          n_out = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  cim_tile #(.IC(IC), .OC(OC), .GRP(GRP)) dut (.clk, .rst_n, .w_we, .w_row, .w_col, .w_data,
    .in_valid, .in_first, .x, .out_valid, .out_first, .psum);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bf16_t pick(int mode);
    case (mode)
      0: return rand_bf16(120, 134);
      1: return rand_bf16(90, 160);
      2: return ($urandom_range(0, 3) == 0) ? 16'h0000 : rand_bf16(124, 130);
      default: return rand_bf16(127, 127);
    endcase
  endfunction

  task automatic load_weights(int mode);
    for (int r = 0; r < IC; r++)
      for (int c = 0; c < OC; c++) begin
        @(negedge clk);
        wmem[r][c] = pick(mode);
        w_we = 1; w_row = 3'(r); w_col = 2'(c); w_data = wmem[r][c];
      end
    @(negedge clk);
    w_we = 0;
  endtask

  // expected partial sums of the current x
  task automatic push_expected();
    bf16_t  xa[], wa[];
    longint s;
    int     e;
    real    dot, absdot;
    xa = new[IC]; wa = new[IC];
    for (int c = 0; c < OC; c++) begin
      for (int r = 0; r < IC; r++) begin xa[r] = x[r]; wa[r] = wmem[r][c]; end
      exp_q.push_back(ref_column(xa, wa, GRP, 1'b1, s, e));
      dot = 0.0; absdot = 0.0;
      for (int r = 0; r < IC; r++) begin
        dot += bf16_to_real(xa[r]) * bf16_to_real(wa[r]);
        absdot += (bf16_to_real(xa[r]) * bf16_to_real(wa[r]) < 0.0) ?
                  -bf16_to_real(xa[r]) * bf16_to_real(wa[r]) : bf16_to_real(xa[r]) * bf16_to_real(wa[r]);
      end
      // accuracy bound: rounding plus alignment truncation
      checks++;
      begin
        real got, err;
        got = bf16_to_real(exp_q[$]);
        err = got - dot; if (err < 0.0) err = -err;
        if (err > absdot * pow2(-7) + 1e-30) begin
          failures++;
          if (failures < 10) $display("FAIL accuracy: model %g vs exact %g", got, dot);
        end
      end
    end
    cyc_q.push_back(cycle);
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int c0;
      c0 = cyc_q.pop_front();
      n_out++;
      checks++;
      if (cycle - c0 != LAT) begin
        failures++;
        $display("FAIL latency %0d", cycle - c0);
      end
      for (int c = 0; c < OC; c++) begin
        bf16_t e;
        e = exp_q.pop_front();
        checks++;
        if (psum[c] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL col %0d got %h expected %h", c, psum[c], e);
        end
      end
    end
  end

  initial begin
    clear_counters();
    for (int r = 0; r < IC; r++) x[r] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 4; phase++) begin
      load_weights(phase);
      for (int v = 0; v < NVEC; v++) begin
        @(negedge clk);
        for (int r = 0; r < IC; r++) x[r] = (v % 97 == 5) ? 16'h8000 : pick((phase + v) % 3);
        in_valid = 1; in_first = (v == 0);
        push_expected();
      end
      @(negedge clk);
      in_valid = 0;
      repeat (LAT + 2) @(negedge clk);
    end
    checks++;
    if (n_out != 4 * NVEC) begin failures++; $display("FAIL %0d outputs", n_out); end
    checks++;
    if (n_local_shift == 0 || n_shift_out == 0 || n_global_shift == 0 || n_round_up == 0 || n_zero == 0) begin
      failures++;
      $display("FAIL coverage local=%0d out=%0d global=%0d round=%0d zero=%0d", n_local_shift,
               n_shift_out, n_global_shift, n_round_up, n_zero);
    end
    $display("mechanisms: local_shift=%0d shift_out=%0d global_shift=%0d round_up=%0d zero=%0d",
             n_local_shift, n_shift_out, n_global_shift, n_round_up, n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
