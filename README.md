# SafeCiM: a fault-resilient BFLOAT16 compute-in-memory macro in SystemVerilog

SafeCiM is a digital compute-in-memory (CiM) matrix-vector unit that works
in BFLOAT16 but does its heavy lifting with integer hardware. Each memory
cell holds one weight and sits next to a small integer multiplier. The
floating-point bookkeeping (exponents, alignment, normalization) is kept
around the integer core. The design was proposed by Bhattacharya et al. in
"SafeCiM: Investigating Resilience of Hybrid Floating-Point Compute-in-Memory
Deep Learning Accelerators". That work first injects bit flips into every stage
of a conventional *pre-aligned* FP-CiM and measures the damage. From the
results it derives four rules for a more robust design:

1. **Align after multiplying (post-alignment).** Weights and inputs keep
   their own exponents. Products are shifted only after the multiply. A
   corrupted high-order product bit is then shifted down along with the rest
   of the product, instead of being amplified.
2. **Use small crossbars.** The 128 × 32 crossbar is cut into H × W = 16 × 8
   partitions of ic × oc = 8 × 4 cells. Each column's adder tree is then only
   3 levels deep, so an adder fault passes through fewer levels.
3. **Give every partition its own normalization and rounding.**
4. **Align in two steps.** Products are aligned in groups of 4 (local
   alignment). After two adder levels, the group sums are aligned to the
   column maximum (global alignment).

This RTL implements that design at the published size: 4096 BFLOAT16
multiply-accumulate cells, IC = 128 inputs and OC = 32 outputs. It contains
no fault-injection hardware. The fault study was done in software, and the
resilience claims concern where faults land in this datapath.

## Number formats

| quantity | width | meaning |
|---|---|---|
| BFLOAT16 word | 16 | sign 15, exponent 14..7 (bias 127), fraction 6..0 |
| mantissa | 13, signed | `(-1)^s · {1, M, 0000}`: hidden one, 7 fraction bits, 4 zero pad bits; value = mant · 2^(E−127−11) |
| product | 26, signed | mant_x · mant_w; value = prod · 2^(Ex+Ew−276) |
| exponent sum | 9, unsigned | Ex + Ew, kept without removing the bias |
| alignment offset | 5, unsigned | max − own exponent, saturating at 31 |
| group sum | 28, signed | sum of 4 aligned products |
| column sum | 29, signed | sum of the 8 aligned products of a partition column |

The constant 276 = 2·127 + 2·11 appears throughout. Every integer in the
datapath is scaled by 2^(e − 276), where e is the exponent sum it carries.
Operands whose exponent field is 0 (zero or subnormal) are treated as zero.
A product with a zero operand gets exponent sum 0, so it never becomes a
group maximum.

## Inside one partition (`cim_tile`)

```
 x[0..7] (BF16) ─ bf16_decode ─┐  (one decoder per row, shared by the row)
                               ▼
  em_cell[r][c]: weight register + 13×13 multiplier  → prod (26b), esum (9b)
        │ reg
        ▼   per column c:
  local_align (rows 0-3)      local_align (rows 4-7)   group max, shift right
        │ 4 products                │ 4 products
    level 1: 2 adders          level 1: 2 adders
    level 2: 1 adder           level 2: 1 adder        → 2 group sums (28b)
        └──────── global_align ────────┘               global max, shift right
                 level 3: 1 adder                      → column sum (29b) + exponent
        │ reg
  norm_round                                           → BF16 partial sum
        │ reg
```

**Local alignment.** Each group of 4 products finds its largest exponent
sum. Every product in the group is arithmetically shifted right by its
distance from that maximum. For example, exponent sums 256, 254, 250 and 220
give offsets 0, 2, 6 and 36. The last offset saturates to 31, and a 26-bit
product shifted that far leaves only its sign bits (0 or −1). Bits shifted
out are dropped, which truncates toward −∞. After the shift, the four
products are integers on a common scale and can be added directly.

**Adder tree with global alignment.** The first two levels add only within
a group. The two resulting group sums still carry different exponents (the
two group maxima). `global_align` shifts the sum with the smaller exponent
right by the difference. The third level then adds the two sums. The output
is the column sum together with the column's global maximum exponent. In
this design, no stage before the multiplier shifts anything, and every
shift happens after an arithmetic stage. This is the property the
published design relies on for resilience.

**Normalization and rounding (`norm_round`).** This stage converts the
column sum to a BFLOAT16 value:
- It separates the sign and takes the magnitude.
- It finds the leading one at position L and shifts the magnitude so that
  this one becomes the hidden bit.
- It keeps the next 7 bits as the fraction and rounds to nearest, ties to
  even.
- The biased exponent is L + e − 149 (149 = 276 − 127), plus one if rounding
  carries out.
- A zero sum gives +0. A result exponent of 0 or below flushes to signed
  zero. An exponent of 255 or above saturates to signed infinity.

With `ROUND_NE = 0` the fraction is the 7 bits after the leading one,
simply truncated. That is the behaviour the published text describes for
its baseline.

Exactness: the result is the correctly rounded value of the column sum
after the two truncating shifts. Versus the exact dot product, the error is
one BFLOAT16 rounding plus at most one unit in the last place (of a 26-bit
or 28-bit word) per shift.

## The full macro (`safecim_top`)

Partition (h, w) receives input rows h·8 … h·8+7 and produces output
columns w·4 … w·4+3. All 8 partitions of a row band share the same inputs.
For each output column, H = 16 partitions deliver a BFLOAT16 partial sum. The
`accumulation` stage adds them with a pairwise tree of BFLOAT16 adders
(0+1, 2+3, …, four levels). It then adds the result into a per-column
BFLOAT16 accumulator. `in_first` restarts the accumulator, which lets a
layer with more than 128 input channels be fed in 128-wide chunks. The
adders (`bf16_add`) align both significands against 16 guard bits, add
them, and reuse `norm_round`. The result is correctly rounded to nearest
even. Subnormals are flushed, and infinities or NaNs pass through.

### Interface

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (clears weights, valids, accumulators) |
| `w_we`, `w_row`, `w_col`, `w_data` | in | 1, 7, 5, 16 | write one BFLOAT16 weight at crossbar row (input channel) `w_row`, column `w_col` |
| `in_valid`, `in_first` | in | 1 | an input vector is present; it starts a new accumulation |
| `x` | in | 128 × 16 | input activations |
| `out_valid` | out | 1 | `y` holds a new result |
| `y` | out | 32 × 16 | accumulated BFLOAT16 outputs |

Timing: one weight write per clock, effective from the next clock. One input
vector per clock, with no stalls. `y` appears 4 clocks after its
`in_valid`: the EM product register, the adder-tree register, the N&R
register and the accumulator. A vector presented in the same clock as a
weight write still sees the old weight; the new weight applies from the next
vector on.

## Where this RTL follows the paper and where it chooses

Taken from the paper:
- BFLOAT16 operands
- the 12-bit padded mantissa in 13-bit two's complement
- 26-bit products
- post-alignment
- the 8 × 4 × 16 × 8 stencil with IC = 128 and OC = 32
- local alignment groups of 4
- 3 adder levels with global alignment after level 2
- per-partition normalization and rounding
- an accumulation stage after the partitions
- the normalization steps (sign separation, shift to 1.M, exponent
  adjustment, 7-bit fraction)

Choices made here, where the paper is silent or only names a block:
- **Offsets are 5 bits, saturating.** The paper's fault study uses 4-bit
  offsets in its pre-aligned baseline, where shorter words are shifted. A
  4-bit offset could not shift a 26-bit product out completely.
- **Exponent sums are 9-bit raw sums** rather than re-biased 8-bit values.
- **Rounding is round-to-nearest-even.** The paper's figure labels the stage
  "normalization and rounding", while its text describes plain extraction of
  7 bits. The text's version is available with `ROUND_NE = 0`.
- **Special values:** zero and subnormal inputs are flushed; results
  underflow to zero and overflow to infinity; NaN and infinity inputs are
  not treated specially in the array.
- **Accumulation:** the tree order, the BFLOAT16 accumulator and the
  `in_first` flag are this design's own.
- **Interface and timing:** the pipeline registers, the write port and the
  streaming interface are this design's own.

Not included: weight storage beyond the 4096 cells, any controller or
buffer that sequences a neural-network layer through the macro, and the
software fault-injection framework. The paper describes none of these as
hardware. The evaluated networks (AlexNet, BERT-Base, LLaMA-3.2-1B,
Qwen3-0.6B) have 10^7 to 10^9 weights. The macro can compute any 128 × 32
slice of their layers, but running a whole model needs an external weight
store and a sequencer. Because there is one accumulator per column, a token's input
chunks must be fed one after another, with the matching weights reloaded in
between (4096 write clocks per chunk).

## Files

`rtl/`:
- `safecim_pkg.sv`: shared types and widths
- `bf16_decode.sv`: operand decoder
- `em_cell.sv`: memory cell and multiplier
- `local_align.sv`
- `global_align.sv`
- `adder_tree.sv`
- `norm_round.sv`
- `cim_tile.sv`: one partition
- `bf16_add.sv`
- `accumulation.sv`
- `safecim_top.sv`

`tb/`:
- `safecim_ref_pkg.sv`: a reference model written independently of the
  RTL. Rounding is done on exact doubles, and alignment uses 64-bit
  integers. It counts how often each mechanism occurs.
- One self-checking testbench per module.
- `tb_safecim_top.sv`: end-to-end test at 4 × 2 partitions.
- `tb_safecim_full.sv`: end-to-end test at the full default size.
- `tb_safecim_ablation.sv`: end-to-end test of the alternative
  configurations (ic = 16, groups of 2).
- `tb_safecim_layer.sv`: a 768-input × 32-output layer slice (BERT-Base
  width, random data) at full size. The layer runs in six 128-wide input
  chunks. For each chunk the weights are reloaded and the result is added in
  the accumulator. The output is checked bit-exactly and against a
  double-precision dot product.

Every testbench prints `TB_RESULT checks=N failures=M`. The end-to-end
tests compare every output bit-exactly and check the 4-clock latency. They
fail if any of these never occurred:
- nonzero local and global offsets
- products shifted out
- rounding up
- underflow and overflow
- zero and negative results
- continued accumulation
- reprogramming

The partition test also bounds the error against a double-precision dot
product.

## Simulating

With Verilator 5 (run from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/safecim_pkg.sv tb/safecim_ref_pkg.sv -y rtl +libext+.sv \
  tb/tb_safecim_top.sv --top-module tb_safecim_top -o sim
./obj_dir/sim
```

Replace the testbench name to run another one. The full-size test builds
4096 multipliers; it builds and runs in about two minutes.

## Changing the configuration

`safecim_top` parameters: `IC_P` (ic), `OC_P` (oc), `H`, `W`, `GRP` (local
group size) and `ROUND_NE`. ic and GRP should be powers of two, with GRP
dividing ic. The adder-tree depth (log2 ic) and the level at which global
alignment happens (log2 GRP) follow from them. For example, the paper's
alternative 16 × 4 × 8 × 8 stencil is `IC_P = 16, H = 8`. Its
group-size-2 variant is `GRP = 2`. Port widths of `w_row` and `w_col`
follow from IC = ic·H and OC = oc·W.
