// tb_safecim_full: end-to-end test of the SafeCiM macro at its default,
// full size (H x W = 16 x 8 partitions of 8 x 4: a 128 x 32 crossbar, 4096
// multiply-accumulate cells), with the top's parameters left alone.
//
// All weights are programmed through the write port, then input vectors are
// streamed one per clock. For every output column the testbench rebuilds
// the result from the reference model: each partition's column through the
// post-alignment pipeline, the H partition results through a pairwise tree
// of BFLOAT16 additions, then the running accumulation (restarted whenever
// in_first is set). Outputs must be bit-exact and appear 4 clocks after
// their input. The run switches between weight sets and input mixes so that
// every mechanism happens: nonzero local offsets, products shifted out
// entirely, nonzero global offsets, rounding up, underflow flush, overflow to
// infinity, zero and negative results, continued accumulation and
// reprogramming. A mechanism that never happened counts as a failure.
module tb_safecim_full;
  import safecim_pkg::*;
  import safecim_ref_pkg::*;

  localparam int ICP = IC_T, OCP = OC_T, H = H_T, W = W_T, GRP = GROUP;
  localparam int IC = ICP * H, OC = OCP * W, LAT = 4, NVEC = 100;
  localparam int HP = (H > 1) ? (1 << $clog2(H)) : 2;

  logic        clk = 0, rst_n = 0;
  logic        w_we = 0;
  logic [$clog2(IC)-1:0] w_row = '0;
  logic [$clog2(OC)-1:0] w_col = '0;
  bf16_t       w_data = '0;
  logic        in_valid = 0, in_first = 0;
  bf16_t       x [IC];
  logic        out_valid;
  bf16_t       y [OC];
  int          checks = 0, failures = 0;

  bf16_t       wmem [IC][OC];
  bf16_t       model [OC];
  bf16_t       exp_q [$];
  int          cyc_q [$];
  int          cycle = 0, n_out = 0, n_cont = 0, n_reprog = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  safecim_top dut (
    .clk, .rst_n, .w_we, .w_row, .w_col, .w_data, .in_valid, .in_first, .x, .out_valid, .y);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // value mixes: 0 normal, 1 wide spread, 2 sparse, 3 tiny, 4 huge
  function automatic bf16_t pick(int mode);
    case (mode)
      0: return rand_bf16(118, 136);
      1: return rand_bf16(80, 170);
      2: return ($urandom_range(0, 2) == 0) ? 16'h0000 : rand_bf16(122, 132);
      3: return rand_bf16(5, 20);
      default: return rand_bf16(245, 252);
    endcase
  endfunction

  task automatic load_weights(int mode);
    for (int r = 0; r < IC; r++)
      for (int c = 0; c < OC; c++) begin
        @(negedge clk);
        wmem[r][c] = pick(mode);
        w_we = 1; w_row = ($clog2(IC))'(r); w_col = ($clog2(OC))'(c); w_data = wmem[r][c];
      end
    @(negedge clk);
    w_we = 0;
    n_reprog++;
  endtask

  task automatic push_expected(bit first);
    bf16_t  xa[], wa[];
    bf16_t  v [HP];
    longint s;
    int     e;
    xa = new[ICP]; wa = new[ICP];
    for (int c = 0; c < OC; c++) begin
      for (int i = 0; i < HP; i++) v[i] = 16'h0000;
      for (int h = 0; h < H; h++) begin
        for (int r = 0; r < ICP; r++) begin
          xa[r] = x[h*ICP + r];
          wa[r] = wmem[h*ICP + r][c];
        end
        v[h] = ref_column(xa, wa, GRP, 1'b1, s, e);
      end
      for (int w2 = HP / 2; w2 >= 1; w2 = w2 / 2)
        for (int i = 0; i < w2; i++) v[i] = ref_bf16_add(v[2*i], v[2*i+1]);
      model[c] = first ? v[0] : ref_bf16_add(model[c], v[0]);
      exp_q.push_back(model[c]);
    end
    cyc_q.push_back(cycle);
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int c0;
      c0 = cyc_q.pop_front();
      n_out++;
      checks++;
      if (cycle - c0 != LAT) begin failures++; $display("FAIL latency %0d", cycle - c0); end
      for (int c = 0; c < OC; c++) begin
        bf16_t e;
        e = exp_q.pop_front();
        checks++;
        if (y[c] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL col %0d got %h expected %h", c, y[c], e);
        end
      end
    end
  end

  initial begin
    int sent;
    sent = 0;
    clear_counters();
    for (int r = 0; r < IC; r++) x[r] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 5; phase++) begin
      load_weights(phase);
      for (int v = 0; v < NVEC / 5; v++) begin
        @(negedge clk);
        for (int r = 0; r < IC; r++)
          x[r] = (v % 37 == 3) ? 16'h0000 : pick((v % 4 == 0) ? phase : (phase + v) % 3);
        in_valid = 1;
        in_first = (v % 4 == 0);
        if (!in_first) n_cont++;
        push_expected(in_first);
        sent++;
      end
      @(negedge clk);
      in_valid = 0;
      repeat (LAT + 2) @(negedge clk);
    end
    checks++;
    if (n_out != sent) begin failures++; $display("FAIL %0d outputs for %0d inputs", n_out, sent); end
    $display("mechanisms: local_shift=%0d shift_out=%0d global_shift=%0d round_up=%0d round_carry=%0d flush=%0d overflow=%0d zero=%0d negative=%0d continued=%0d reprogram=%0d",
             n_local_shift, n_shift_out, n_global_shift, n_round_up, n_round_carry, n_flush,
             n_overflow, n_zero, n_negative, n_cont, n_reprog);
    checks++;
    if (n_local_shift == 0 || n_shift_out == 0 || n_global_shift == 0 || n_round_up == 0 ||
        n_flush == 0 || n_overflow == 0 || n_zero == 0 || n_negative == 0 || n_cont == 0 || n_reprog < 2) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
