// safecim_top: the SafeCiM floating-point compute-in-memory macro.
//
// An IC x OC = 128 x 32 BFLOAT16 weight crossbar (4096 multiply-accumulate
// cells) is cut into H x W = 16 x 8 partitions of ic x oc = 8 x 4 cells each
// (IC = ic*H, OC = oc*W). Partition (h, w) sees input rows h*ic .. h*ic+ic-1
// and produces output columns w*oc .. w*oc+oc-1. Inside a partition the
// products are aligned after the multiply (post-alignment) in groups of 4,
// summed by a 3-level adder tree that realigns the two group sums after its
// second level, and normalized/rounded to BFLOAT16 by the partition's own
// N&R stage. The accumulation stage adds the H partition results of every
// column and accumulates them over successive input vectors. Partitioning,
// post-alignment, group size, adder depth and formats follow the published
// design; the pipeline, the programming port and the accumulation details
// are this design's choice.
//
// Interface
//   w_we/w_row/w_col/w_data : write one BFLOAT16 weight, crossbar row
//                             (input channel) w_row, column w_col
//   in_valid, in_first, x   : one input vector of IC activations per clock;
//                             in_first starts a new accumulation
//   out_valid, y            : OC accumulated BFLOAT16 outputs
// Timing: y/out_valid follow in_valid after 4 clocks (3 in the partitions,
// 1 in the accumulator); one vector per clock.
module safecim_top
  import safecim_pkg::*;
#(
  parameter int unsigned IC_P     = IC_T,   // ic
  parameter int unsigned OC_P     = OC_T,   // oc
  parameter int unsigned H        = H_T,
  parameter int unsigned W        = W_T,
  parameter int unsigned GRP      = GROUP,
  parameter bit          ROUND_NE = 1'b1,
  localparam int unsigned IC      = IC_P * H,
  localparam int unsigned OC      = OC_P * W,
  localparam int unsigned ROW_W   = (IC > 1) ? $clog2(IC) : 1,
  localparam int unsigned COL_W   = (OC > 1) ? $clog2(OC) : 1,
  localparam int unsigned RA_W    = (IC_P > 1) ? $clog2(IC_P) : 1,
  localparam int unsigned CA_W    = (OC_P > 1) ? $clog2(OC_P) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             w_we,
  input  logic [ROW_W-1:0] w_row,
  input  logic [COL_W-1:0] w_col,
  input  bf16_t            w_data,
  input  logic             in_valid,
  input  logic             in_first,
  input  bf16_t            x [IC],
  output logic             out_valid,
  output bf16_t            y [OC]
);

  bf16_t part      [H][OC];
  logic  t_valid   [H][W];
  logic  t_first   [H][W];

  for (genvar h = 0; h < H; h++) begin : g_h
    bf16_t xt [IC_P];
    for (genvar r = 0; r < IC_P; r++) begin : g_x
      assign xt[r] = x[h*IC_P + r];
    end
    for (genvar w = 0; w < W; w++) begin : g_w
      bf16_t pt [OC_P];
      logic  sel;
      assign sel = w_we && (int'(w_row) / IC_P == h) && (int'(w_col) / OC_P == w);
      cim_tile #(.IC(IC_P), .OC(OC_P), .GRP(GRP), .ROUND_NE(ROUND_NE)) u_tile (
        .clk      (clk),
        .rst_n    (rst_n),
        .w_we     (sel),
        .w_row    (RA_W'(int'(w_row) % IC_P)),
        .w_col    (CA_W'(int'(w_col) % OC_P)),
        .w_data   (w_data),
        .in_valid (in_valid),
        .in_first (in_first),
        .x        (xt),
        .out_valid(t_valid[h][w]),
        .out_first(t_first[h][w]),
        .psum     (pt)
      );
      for (genvar c = 0; c < OC_P; c++) begin : g_c
        assign part[h][w*OC_P + c] = pt[c];
      end
    end
  end

  accumulation #(.H(H), .OC(OC)) u_acc (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (t_valid[0][0]),
    .in_first (t_first[0][0]),
    .part     (part),
    .out_valid(out_valid),
    .acc      (y)
  );

  // All partitions run in lock step.
  property p_lockstep;
    @(posedge clk) disable iff (!rst_n) t_valid[H-1][W-1] == t_valid[0][0];
  endproperty
  a_lockstep: assert property (p_lockstep);

endmodule
