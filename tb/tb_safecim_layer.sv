// tb_safecim_layer: runs a slice of a fully connected layer larger than the
// array through the full-size macro, the way a layer of the evaluated
// networks has to be mapped onto it.
//
// The layer has K_IN = 768 input channels (the hidden width of BERT-Base)
// and the first 32 of its output channels; weights and activations are
// random BFLOAT16 values of realistic magnitude, since no trained model data
// is used. The 768 inputs are cut into 6 chunks of 128. For each token, the
// chunk's 128 x 32 weights are written into the crossbar, the chunk's 128
// activations are streamed in, and the accumulator adds the chunk result
// (in_first only on chunk 0). Each output is compared bit-exactly with the
// reference model and, as a sanity bound, with the double-precision dot
// product (error within 2^-6 of the sum of absolute products). Layers of the
// other evaluated networks differ only in K_IN and the number of output
// chunks.
module tb_safecim_layer;
  import safecim_pkg::*;
  import safecim_ref_pkg::*;

  localparam int ICP = IC_T, OCP = OC_T, H = H_T, W = W_T, GRP = GROUP;
  localparam int IC = ICP * H, OC = OCP * W, LAT = 4;
  localparam int K_IN = 768, NCH = K_IN / IC, NTOK = 2;

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

  bf16_t       wfull [K_IN][OC];
  bf16_t       act   [NTOK][K_IN];
  bf16_t       model [OC];
  int          n_out = 0;

  always #5 clk = ~clk;

  safecim_top dut (.clk, .rst_n, .w_we, .w_row, .w_col, .w_data, .in_valid, .in_first, .x, .out_valid, .y);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) n_out++;

  task automatic load_chunk(int ch);
    for (int r = 0; r < IC; r++)
      for (int c = 0; c < OC; c++) begin
        @(negedge clk);
        w_we = 1; w_row = ($clog2(IC))'(r); w_col = ($clog2(OC))'(c); w_data = wfull[ch*IC + r][c];
      end
    @(negedge clk);
    w_we = 0;
  endtask

  function automatic void model_chunk(int tok, int ch);
    bf16_t  xa[], wa[];
    bf16_t  v [16];
    longint s;
    int     e;
    xa = new[ICP]; wa = new[ICP];
    for (int c = 0; c < OC; c++) begin
      for (int h = 0; h < H; h++) begin
        for (int r = 0; r < ICP; r++) begin
          xa[r] = act[tok][ch*IC + h*ICP + r];
          wa[r] = wfull[ch*IC + h*ICP + r][c];
        end
        v[h] = ref_column(xa, wa, GRP, 1'b1, s, e);
      end
      for (int w2 = 8; w2 >= 1; w2 = w2 / 2)
        for (int i = 0; i < w2; i++) v[i] = ref_bf16_add(v[2*i], v[2*i+1]);
      model[c] = (ch == 0) ? v[0] : ref_bf16_add(model[c], v[0]);
    end
  endfunction

  initial begin
    for (int k = 0; k < K_IN; k++)
      for (int c = 0; c < OC; c++) wfull[k][c] = rand_bf16(118, 124);
    for (int t = 0; t < NTOK; t++)
      for (int k = 0; k < K_IN; k++) act[t][k] = ($urandom_range(0, 9) == 0) ? 16'h0000 : rand_bf16(122, 129);
    for (int r = 0; r < IC; r++) x[r] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NTOK; t++) begin
      for (int ch = 0; ch < NCH; ch++) begin
        load_chunk(ch);
        @(negedge clk);
        for (int r = 0; r < IC; r++) x[r] = act[t][ch*IC + r];
        in_valid = 1; in_first = (ch == 0);
        model_chunk(t, ch);
        @(negedge clk);
        in_valid = 0;
        repeat (LAT - 1) @(negedge clk);
        checks++;
        if (!out_valid) begin failures++; $display("FAIL no output 4 clocks after the vector"); end
        for (int c = 0; c < OC; c++) begin
          checks++;
          if (y[c] !== model[c]) begin
            failures++;
            if (failures < 10) $display("FAIL token %0d chunk %0d col %0d got %h expected %h", t, ch, c, y[c], model[c]);
          end
        end
      end
      // whole-layer sanity bound against double precision
      for (int c = 0; c < OC; c++) begin
        real dot, absdot, err;
        dot = 0.0; absdot = 0.0;
        for (int k = 0; k < K_IN; k++) begin
          real p;
          p = bf16_to_real(act[t][k]) * bf16_to_real(wfull[k][c]);
          dot += p;
          absdot += (p < 0.0) ? -p : p;
        end
        err = bf16_to_real(y[c]) - dot;
        if (err < 0.0) err = -err;
        checks++;
        if (err > absdot * pow2(-6)) begin
          failures++;
          $display("FAIL token %0d col %0d: %g vs double %g", t, c, bf16_to_real(y[c]), dot);
        end
      end
    end
    repeat (2) @(negedge clk);
    checks++;
    if (n_out != NTOK * NCH) begin failures++; $display("FAIL %0d outputs", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
