# MixFP4 tensor core in SystemVerilog

NVFP4 stores tensors as blocks of 16 four-bit values in the E2M1 format
(magnitudes 0, 0.5, 1, 1.5, 2, 3, 4, 6), each block scaled by one FP8 E4M3
number, the whole tensor by one FP32 number. E2M1 spends its levels
unevenly. That suits blocks with a few large outliers. It suits flat blocks
badly, and those are better served by evenly spaced, INT4-like levels.
MixFP4 lets every block choose between two 4-bit formats:

* **E2M1**, the NVFP4 format, for blocks with a wide dynamic range;
* **E1M2**, whose magnitudes 0, 0.5, ..., 3.5 are evenly spaced. Read with
  a fixed factor of 2, they are exactly the INT4 levels 0..7.

The choice costs no storage. An NVFP4 block scale is an *unsigned* E4M3
number, so the sign bit of its FP8 byte carries no information. MixFP4
stores the format bit **T** there.

The hardware change is just as small. Each 4-bit element is decoded into
one internal format, **E2M2**, which holds every value of both formats. The
multipliers and adders then work on E2M2 no matter which format a block
uses, and no second datapath is needed. This repository is RTL for such a
tensor core in its FP4 mode. Its building block is one output lane, the
"slice", which computes a K-long dot product at 16 FP4 multiply-adds per
cycle. Sixteen slices make the 4 × 4 tensor core, which computes a 4 × 4
output tile at 4 × 4 × 16 multiply-adds per cycle.

## Number formats

| name | bits | meaning |
|---|---|---|
| FP4 element | `s p2 p1 p0` | T=0: E2M1, exponent `p2p1` (bias 1), mantissa `p0`. T=1: E1M2, exponent `p2` (bias 0), mantissa `p1p0`, read as the integer `p2p1p0` (0..7). |
| packed block scale | `T e3 e2 e1 e0 m2 m1 m0` | `T` = format of the block; the low 7 bits are an unsigned E4M3 scale, bias 7, subnormal at e = 0, maximum 448, `1111.111` is NaN |
| internal E2M2 | `s e1 e0 m1 m0` | exponent bias 1, subnormal at e = 0: values 0, 0.25, 0.5, 0.75, 1 ... 1.75, 2 ... 3.5, 4, 5, 6, 7 |
| partial sum | IEEE single | |

The same packed scale byte reads as NVFP4 when T = 0. It reads as "NVINT4"
(INT4 values with an E4M3 block scale) when every T = 1. The slice runs both
of those as special cases.

### The decoder and the factor 2

`mixfp4_decoder` has two paths and a 2:1 multiplexer selected by T:

* E2M1 path: the bits are shifted left by one. `s e1 e0 m` becomes
  `s e1 e0 m 0`. With bias 1 in both formats, the value does not change:
  E2M1 `111` (6) becomes E2M2 `1110` (6).
* E1M2 path: an eight-entry table maps the payload `c` to the E2M2 code of
  the integer `c`: 0→`0000`, 1→`0100`, 2→`1000`, 3→`1010`, 4→`1100`,
  5→`1101`, 6→`1110`, 7→`1111`.

The E1M2 path therefore yields twice the E1M2 value. That doubling is
deliberate and nothing downstream undoes it. In MixFP4 an E1M2 block is
quantised with the block scale `blockmax / 7`, so its elements *are* the
integers 0..7. Calling them E1M2 values 0..3.5 is only a naming convention.
In real arithmetic, `decoded element × E4M3 block scale × tensor scale` is
the dequantised value for both formats. (The quantiser uses `blockmax / 6`
for E2M1 blocks, 6 being the largest E2M1 value.)

## The slice

```
 a_elems[16], a_scale ─┐           b_elems[16], b_scale ─┐
                       │ T = scale[7]                      │
               16 x mixfp4_decoder                16 x mixfp4_decoder
                       └──────────────┬──────────────────┘
   column c = 0..3:  element 4c   -> E2M2 mul ─┐
                     element 4c+1 -> E2M2 mul ─+ (pair adder)
                     element 4c+2 -> FP8  mul ─+   (E2M2 re-encoded as E5M3)
                     element 4c+3 -> BF16 mul ─+   (E2M2 re-encoded as E8M10)
                                               │ column sum
                       adder tree: (col0 + col1) + (col2 + col3)
                                    │ 16-bit exact partial dot, units 2^-4
                        ─────────── pipeline register ───────────
                 x (scale_a[6:0] as E4M3) x (scale_b[6:0] as E4M3)   block_scale_mul
                                    │ exact FP32
                 + (in_first ? psum_in : accumulator)                 fp32_add, RNE
                        ─────────── accumulator register ─────────── -> acc_out
```

The slice has the multiplier mix of a BF16/FP8/FP4 tensor core with
throughput ratio 4:8:16. There are four BF16 lanes (E8M10 multipliers),
four FP8 lanes (E5M3) and eight FP4 lanes, drawn as four columns of
{FP4, FP4, FP8, BF16}. MixFP4 changes only the FP4 lanes. Their E2M1
multipliers become E2M2 multipliers and get decoders in front, and the
adder between the two FP4 lanes of a column grows by two bits. In the FP4
mode all 16 multipliers work on FP4 data, so one pair of 16-element blocks
goes through per cycle. The FP8 and BF16 multipliers receive the decoded
E2M2 operands re-encoded in their own formats (`e2m2_widen`). That
conversion is exact.

### Where the arithmetic is exact and where it rounds

Only the final FP32 addition rounds. Everything before it is exact by
construction:

* `fp_mul` keeps the full product of the significands, 6 bits for E2M2, and
  the sum of the exponents.
* `prod_align` shifts each product onto a signed 12-bit fixed-point grid
  whose LSB is 2^-4, the smallest E2M2 product (0.25 × 0.25). For E2M2
  products the shift is 0..4 and the largest product, 7 × 7 = 49, is 784 on
  the grid. The width 12 is the aligner width `2^(x+1) + 2y` of the usual
  gate-count model for x = y = 2. Overflow and inexact flags exist for
  generality. Legal FP4 input can raise neither; the slice asserts this and
  reports both on `ovf_flag`/`inexact_flag`.
* `dot_adder_tree` uses integer adders, each one bit wider than its inputs.
  The sum of 16 products fits in 16 bits (at most 12544 on the grid).
* `block_scale_mul` multiplies the two 4-bit E4M3 significands (8 bits)
  and the 16-bit partial dot, giving at most 24 significant bits. The
  result is therefore an FP32 number with no rounding.
* `fp32_add` adds it to the partial sum with round to nearest, ties to
  even. This is the only rounding in the slice. A K-long dot product
  rounds once per block.

So a block's contribution is bit-exact. An FP32 reference written in any
language reproduces the slice's output bit for bit if it computes
`round_fp32(psum + (dot of decoded values) × sA × sB)` block by block.

### Interface and timing (`mixfp4_tc_slice`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset (clears valid bits and accumulator) |
| `in_valid` | in | 1 | a block pair is presented this cycle |
| `in_first` | in | 1 | the block starts a dot product: add it to `psum_in` instead of the accumulator |
| `a_elems`, `b_elems` | in | 16 × 4 | the two blocks' elements |
| `a_scale`, `b_scale` | in | 8 | packed block scales `{T, E4M3}` |
| `psum_in` | in | 32 | FP32 starting partial sum (used with `in_first`) |
| `out_valid`, `acc_out` | out | 1, 32 | accumulated FP32 result, valid two edges after the block was taken |
| `ovf_flag`, `inexact_flag` | out | 1 | aligner out-of-range indicators (never set for legal input) |

A block can be accepted on every clock edge and there is no back-pressure.
A dot product of K elements takes K/16 cycles of input. Its final value
appears two cycles after the last block. The per-tensor FP32 scales
(`max|X| / 2688` for each operand) are a single multiply applied to the
finished result, outside the slice.

Parameter: `COLS` (default 4) sets the number of columns. The block size is
`4 × COLS`, 16 by default. The partial-dot width follows from it.

## The 4 × 4 tensor core (`mixfp4_tensor_core`, top)

The top module is an `M × N` array of slices (default 4 × 4) that computes
`D = A · B + C` for a 4 × 4 tile, one K block per cycle. Each cycle it takes
one 16-element block from each of the four rows of A and from each of the
four columns of B, each with its own packed scale and so its own format
bit. Lane `(i, j)` gets row `i` of A and column `j` of B. The lanes share
nothing else, so rows and columns in different formats mix freely.

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `in_valid`, `in_first` | in | 1 | as for the slice; `in_first` loads `C` for the whole tile |
| `a_elems`, `a_scale` | in | 4 × 16 × 4, 4 × 8 | A row blocks and their packed scales |
| `b_elems`, `b_scale` | in | 4 × 16 × 4, 4 × 8 | B column blocks and their packed scales |
| `c_in` | in | 4 × 4 × 32 | FP32 C tile |
| `out_valid`, `d_out` | out | 1, 4 × 4 × 32 | FP32 D tile, valid two edges after the block |
| `ovf_flag`, `inexact_flag` | out | 1 | OR of the lanes' aligner flags |

The timing is the slice's: a tile with K/16 blocks takes K/16 cycles of
input, and D appears two cycles after the last block. At the default size,
synthesis gives about 19,000 generic cells and 1,339 flip-flop bits. The
512 decoder tables are inferred as 8-entry ROMs, and synthesis reports them
as 16,384 memory bits. There is no real storage in the design.

## What follows the source design and what is chosen here

Taken from the published MixFP4 design:
* the two element formats and their bit layouts;
* the type bit in bit 7 of the E4M3 scale, and clearing it before the
  scale is used;
* the decoder's two paths, its 4-bit input and 5-bit output, and the table
  entries for payloads 100..111;
* E2M2 multipliers in the FP4 lanes and the 4 × E8M10 + 4 × E5M3 + 8 × E2M2
  multiplier mix;
* four columns with adders, a two-level adder tree, one block-scale
  multiply and one partial-sum adder;
* block size 16 and FP32 accumulation.
* the tensor core as an array with a 4 × 4 × 16 FP4 multiply-add rate per
  cycle, built from identical output lanes.

Chosen here, where the source is silent:
* the E1M2 table entries for payloads 000..011, derived from the INT4
  mapping;
* the E2M2 bias, inferred from the printed decode examples;
* the element-to-lane mapping;
* the exact unnormalised products and the integer adder tree, including a
  13-bit exact pair adder where the source speaks of an "E4M5"
  accumulator;
* re-encoding E2M2 operands for the FP8/BF16 lanes;
* the two pipeline stages;
* the `in_first`/`psum_in` accumulation control and the reset;
* in the 4 × 4 array, broadcasting A rows and B columns to the lanes and
  one shared `in_first` for the tile;
* the FP32 rounding mode;
* E4M3 NaN handling (NaN in, quiet NaN out).

One conflict in the source had to be settled. The FP4 rate of 16
multiply-adds per cycle needs all 32 elements of a block pair decoded every
cycle. The source's drawing puts decoders only on the eight FP4
multipliers, and its gate count budgets 16 decoders per block. This RTL
follows the throughput and has 32 decoders (16 per operand).

Not modelled:
* the BF16 (4 per cycle) and FP8 (8 per cycle) modes of the slice. They
  belong to the unchanged baseline tensor core, and their alignment and
  control are not specified. The E5M3 and E8M10 multipliers are present
  and are used in the FP4 mode.
* operand storage and delivery around the tensor core, and the quantiser,
  which is software.
* FP16 accumulation. The baseline tensor core accumulates in FP16 or FP32;
  only FP32 accumulation is built.

## Files

| file | content |
|---|---|
| `rtl/mixfp4_pkg.sv` | types (`fp4_t`, `e2m2_t`, `scale_packed_t`, `fp32_t`) and constants |
| `rtl/mixfp4_decoder.sv` | FP4 → E2M2 decoder |
| `rtl/fp_mul.sv` | exact multiplier, any exponent/mantissa width |
| `rtl/e2m2_widen.sv` | E2M2 re-encoded as E5M3 / E8M10 |
| `rtl/prod_align.sv` | barrel aligner to the fixed-point grid |
| `rtl/dot_adder_tree.sv` | column adders and tree |
| `rtl/block_scale_mul.sv` | scale unpacking and the per-block scale multiply |
| `rtl/fp32_add.sv` | IEEE single adder, round to nearest even |
| `rtl/mixfp4_tc_slice.sv` | the slice: one output lane |
| `rtl/mixfp4_tensor_core.sv` | the 4 × 4 array of slices (top) |
| `tb/mixfp4_ref_pkg.sv` | reference value functions for the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the workload testbench `tb_mixfp4_gemm_workload` |

## Verification

Every testbench checks its block against values computed in real
arithmetic from the format definitions, not from the RTL. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

* `tb_mixfp4_decoder`: all 32 (element, T) pairs by value, plus the eight
  printed bit patterns.
* `tb_fp_mul`: all E2M2 pairs, plus random E5M3 and E8M10 operands.
* `tb_prod_align`: all E2M2 products including overflow, plus random E5M3
  products with right shifts.
* `tb_dot_adder_tree`: corners, random inputs, and each position alone.
* `tb_block_scale_mul`: random partials and scales; the result must be
  exact, the type bit must have no effect, and the NaN code is checked.
* `tb_fp32_add`: ties, carries, cancellation, subnormals, overflow, NaN and
  infinity, and 20000 random pairs. The reference rounds the
  double-precision sum to single.
* `tb_mixfp4_tc_slice`: the slice at its default size. It runs 300 dot
  products of 1 to 12 blocks with random formats, elements, scales and
  idle cycles, then 64 blocks back to back. Each result must be bit-exact
  and arrive exactly two cycles after its block, and the 64 blocks must
  take 66 cycles. The testbench counts each mechanism and fails if one
  never occurs: both formats on both operands, mixed-format blocks, psum
  loads, accumulation, back-to-back blocks, idle cycles, full-scale
  products (7×7 INT4, 6×6 E2M1), negative and rounded results, and a NaN
  block scale, whose NaN lasts until the next dot product starts.
* `tb_mixfp4_tensor_core`: the 4 × 4 tensor core at its default size. It
  runs 120 tiles of 1 to 16 K blocks. Every row and column block gets a
  random format, elements and scale, and C is random. Random idle cycles
  are inserted. Then it runs 32 blocks back to back, which must take 34
  cycles. All 16 outputs of every tile must be bit-exact and arrive two
  cycles after the block. It counts both formats on A and on B, cycles
  whose A rows mix formats, mixed-format lanes, C loads, accumulation,
  back-to-back blocks and idle cycles, and fails if any of them never
  occurs.
* `tb_mixfp4_gemm_workload`: MixFP4 quantisation done in the testbench,
  followed by one GEMM tile of LLM-layer size on the tensor core.
  * Quantisation: per tensor row, `s32 = max|X| / 2688`. Per block, the
    E2M1 and E1M2/INT4 candidates use scales `blockmax/6` and `blockmax/7`
    rounded to E4M3. The candidate with the smaller squared error is
    kept.
  * Data: four weight rows of K = 4096 that mix flat and outlier-heavy
    blocks, and four activation vectors of K = 4096. K = 4096 is the
    hidden size of 8B-class LLMs, which makes 256 blocks per output.
  * Checks:
    * all 16 results are bit-exact;
    * the tile runs at one block per cycle;
    * no chosen block has a larger error than plain E2M1;
    * both formats are used;
    * each dequantised output is within 2 % of `sum |w·x|` of the
      unquantised product.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_mixfp4_tensor_core rtl/mixfp4_pkg.sv tb/mixfp4_ref_pkg.sv \
  tb/tb_mixfp4_tensor_core.sv -o sim && obj_dir/sim
```

Replace the top module and the testbench file to run another testbench.
Keep the two package files on the command line, ahead of the testbench.
Each testbench runs in seconds and builds free of Verilator warnings at
default settings.
