// tb_accumulation: checks the accumulation stage at its default size
// (H = 16 partial sums per column, 32 columns). Random BFLOAT16 partial sums
// are streamed one set per clock with in_first starting a new accumulation
// every few sets. The expected value is built with a pairwise tree of
// correctly rounded BFLOAT16 additions (computed through doubles) followed
// by the add into the running sum; results must be bit-exact and appear one
// clock after the input. Cancellation to zero and overflow to infinity are
// forced at least once each.
module tb_accumulation;
  import safecim_pkg::*;
  import safecim_ref_pkg::*;

  localparam int H = 16, OC = 32, NVEC = 2000;

  logic  clk = 0, rst_n = 0;
  logic  in_valid = 0, in_first = 0;
  bf16_t part [H][OC];
  logic  out_valid;
  bf16_t acc [OC];
  int    checks = 0, failures = 0;
  bf16_t model [OC];
  bf16_t exp_q [$];
  int    n_out = 0, n_cont = 0;

  always #5 clk = ~clk;

  accumulation #(.H(H), .OC(OC)) dut (.clk, .rst_n, .in_valid, .in_first, .part, .out_valid, .acc);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bf16_t tree(int c);
    bf16_t v [16];
    for (int i = 0; i < 16; i++) v[i] = part[i][c];
    for (int w = 8; w >= 1; w = w / 2)
      for (int i = 0; i < w; i++) v[i] = ref_bf16_add(v[2*i], v[2*i+1]);
    return v[0];
  endfunction

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      n_out++;
      for (int c = 0; c < OC; c++) begin
        bf16_t e;
        e = exp_q.pop_front();
        checks++;
        if (acc[c] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL col %0d got %h expected %h", c, acc[c], e);
        end
      end
    end
  end

  initial begin
    clear_counters();
    for (int h = 0; h < H; h++) for (int c = 0; c < OC; c++) part[h][c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < NVEC; v++) begin
      @(negedge clk);
      for (int h = 0; h < H; h++)
        for (int c = 0; c < OC; c++)
          part[h][c] = (v % 50 == 7) ? ((h % 2 == 1) ? 16'hC2C8 : 16'h42C8) :      // +100 / -100
                       (v % 50 == 9) ? 16'h7F70 :                          // near max
                       ((c + v) % 11 == 0) ? 16'h0000 :
                       rand_bf16(100 + (c % 4) * 5, 130 + (c % 4) * 5);
      in_valid = 1;
      in_first = (v % 5 == 0);
      if (!in_first) n_cont++;
      for (int c = 0; c < OC; c++) begin
        bf16_t t;
        t = tree(c);
        model[c] = in_first ? t : ref_bf16_add(model[c], t);
        exp_q.push_back(model[c]);
      end
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid not one clock after in_valid"); end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (n_out != NVEC || n_zero == 0 || n_overflow == 0 || n_cont == 0) begin
      failures++;
      $display("FAIL outputs=%0d zero=%0d overflow=%0d continued=%0d", n_out, n_zero, n_overflow, n_cont);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
