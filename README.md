# A 2:4 structured-sparse Tensor Core in SystemVerilog

Pruning makes a neural network smaller by setting weights to zero. Matrix
hardware can only skip those zeros if they sit in a regular pattern. The
**2:4 pattern** is one such pattern: in every group of four consecutive
weights along the reduction dimension K, at least two are zero. Every group
then has the same number of nonzeros, so a matrix-multiply unit can skip half
of the multiplications without any irregular indexing, and runs twice as fast
as on the dense matrix.

This repository holds synthesizable RTL for a matrix-multiply-accumulate
unit ("Tensor Core") built on that idea. It computes `D = A x B + C`, where
`A` is either an ordinary dense matrix or a 2:4 matrix in compressed form,
and `B`, `C` and `D` are dense. It also holds testbenches that check the core
against plain arithmetic.

The design follows the sparse Tensor Core of NVIDIA's Ampere architecture, as
that architecture was described in public. That description gives the
storage format, the selection of B operands by metadata, the supported
number formats and the factor-of-two speed-up. It does not give the
micro-architecture. Tile sizes, pipelining, handshakes and floating-point
details are therefore choices made here. The section "What is taken from the
source design and what is not" lists them.

## The compressed format

A 2:4 matrix `W` of `R x C` values is stored as two arrays:

* `R x C/2` values: the two kept values of every group of four.
* `R x C/2` indices of 2 bits each: the position (0 to 3) of each kept value
  inside its group.

Example: take the row `[a 0 0 b | 0 c d 0]`. It is stored as the values
`[a b c d]` and the indices `[0 3 1 2]`.

A group with more than two zeros still stores two entries, so that every row
has the same length. The unused entries are zeros with any two distinct
positions. The testbenches' compressor puts them at the lowest free
positions.

The indices cost 2 bits per stored value. This is an overhead of 12.5 % for
16-bit values and 25 % for 8-bit values. Four dense 16-bit values take 64
bits; compressed they take 2 x 16 + 2 x 2 = 36 bits.

## How a sparse beat works

The core works in *beats*, one per clock. In each beat, every output element
takes one step of its dot product along K. The key part is how the B
operands are chosen in sparse mode.

Suppose a lane has 16 multipliers. In **dense** mode, the lane gets 16 A
values and multiplies them with B elements 0 to 15 of a 32-element B slice.
The upper half of the slice is ignored. One beat covers 16 positions of K.

In **sparse** mode, the same 16 multipliers get 16 stored A values, with
their 16 indices. Together they stand for 32 positions of K, i.e. 8 groups
of four. Stored value `j` belongs to group `j/2`. Its B partner is element
`4*(j/2) + meta[j]` of the 32-element slice. A 4:1 multiplexer per
multiplier makes that selection (`meta_select`). One beat now covers 32
positions of K with the same 16 multipliers. That is the whole speed-up:
multiplications by the pruned zeros are never done, and B elements that would
meet a zero are never used.

```
 B slice (32 elements):  b0 b1 b2 b3 | b4 b5 b6 b7 | ...
 stored A, index:        a(0) a(3)   | c(1) d(2)   | ...
 products:               a*b0 a'*b3  | c*b5 d*b6   | ...
```

## Number formats

An A row is held in 16 slots of 8 bits, and a B slice in 32 such slots. The
same bits carry different numbers of values depending on the format of the
MMA (`in_fmt`):

| format | values per A row | sparse pattern | K per beat, sparse / dense | accumulator | multiply-adds per clock (8 x 4 tile) |
|--------|-----------------:|----------------|---------------------------:|-------------|------------------:|
| INT8   | 16 | 2:4 | 32 / 16 | INT32 (wraps) | 512 |
| FP16   | 8  | 2:4 | 16 / 8  | FP32          | 256 |
| FP16 with FP16 accumulator | 8 | 2:4 | 16 / 8 | FP16 (low 16 bits of the word) | 256 |
| BF16   | 8  | 2:4 | 16 / 8  | FP32          | 256 |
| TF32   | 4  | 1:2 | 8 / 4   | FP32          | 128 |

TF32 uses a 1:2 pattern. At most one of every two values is nonzero, and bit
0 of the index picks which one. TF32 values are carried as 32-bit FP32 words
of which only the upper 19 bits are used.

The 4 : 2 : 1 ratio of the last column matches the published dense rates of
the reference GPU (624, 312 and 156 TOPS). In every format, sparse mode
doubles the rate.

The K steps match what the reference software asks for: for 2:4 GEMMs, K
must be a multiple of 32 for INT8 and of 16 for 16-bit formats.

Floating-point arithmetic in this design works as follows. These rules are
choices made here; the real unit's internal precision is not public.

* Each product is rounded to FP32. For FP16 and TF32 inputs the product is
  exact.
* The products of a beat are added one after another, starting from +0 with
  the lowest index first.
* That sum is then added to the accumulator.
* Every addition rounds to nearest, ties to even.
* FP32 subnormals are flushed to zero, both as inputs and as results. FP16
  subnormal inputs are converted exactly.
* Overflow gives infinity.
* With the FP16 accumulator (`FMT_FP16_ACC16`), the beat's FP32 sum is added
  to the FP16 accumulator in FP32, and the result is rounded back to FP16
  (nearest even, FP16 subnormals kept) after every beat.
* Every NaN result is `0x7FC00000`.

## The core: `sparse_tensor_core`

The core is a grid of `TM x TN` lanes (`sparse_dot_unit`), one lane per
element of the output tile. Per beat:

* Row `r` of A goes to all `TN` lanes of row `r`: `a_val[r]` and
  `a_meta[r]`.
* Column `n` of B goes to all `TM` lanes of column `n`: `b_tile[n]`.

The defaults are `TM = 8`, `TN = 4` and `KH = 16` multipliers per lane. This
gives 512 INT8 multiply-adds per clock. That figure comes from the reference
GPU's 624 dense INT8 TOPS spread over 432 Tensor Cores at 1.41 GHz.

Each lane has two pipeline stages:

1. Select the B operands, multiply, and sum the products. Integer products
   are summed in an adder tree; floating-point products go through
   `fp_dot_sum`. The sum is registered, together with C and the `first`
   flag.
2. Compute `acc <= (first ? C : acc) + sum`. This is an integer add, or an
   FP32 add (`fp32_add`) for the floating-point formats.

### Interface

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `in_valid` | in | 1 | a beat is presented. It is always accepted; there is no back-pressure. |
| `in_first`, `in_last` | in | 1 | first and last beat of an MMA. Both are high for a one-beat MMA. |
| `in_mode` | in | `mode_e` | `MODE_SPARSE`: A is compressed. `MODE_DENSE`: A is plain. |
| `in_fmt` | in | `fmt_e` | `FMT_INT8`, `FMT_FP16`, `FMT_BF16`, `FMT_TF32` or `FMT_FP16_ACC16`; one format per MMA |
| `a_val` | in | `TM x KH x 8` | A rows: stored values, or dense values |
| `a_meta` | in | `TM x KH x 2` | 2-bit positions of the stored values |
| `b_tile` | in | `TN x 2KH x 8` | B slice for each tile column, element 0 = lowest K |
| `c_tile` | in | `TM x TN x 32` | C tile, read only with the `in_first` beat |
| `out_valid` | out | 1 | `d_tile` holds a finished result |
| `d_tile` | out | `TM x TN x 32` | D tile: INT32, or FP32 bit patterns |

### Timing

A beat presented in cycle `t` is taken at the clock edge that ends cycle `t`.
If the `in_last` beat is presented in cycle `t`, then `out_valid` is high in
cycle `t+2` and `d_tile` holds the result in that cycle. The next MMA may
start in cycle `t+1`: its first beat reaches the accumulators only at the edge
that ends cycle `t+2`, so MMAs run back to back with no gap.

An MMA of `K` positions therefore occupies the core for `K / (K per beat)`
cycles. The latency adds two cycles. For example, a 16 x 8 x 128 INT8 GEMM
has four tiles of 4 sparse beats each: 16 cycles in sparse mode against 32 in
dense mode.

In simulation, two assertions check the inputs:

* The two stored values of a 2:4 group must have different positions.
* `in_first` must open each MMA, and must appear only there.

## Mapping a GEMM onto the core

The core works on one output tile at a time. To multiply an `M x K` matrix A
by a `K x N` matrix B:

1. Split D into `TM x TN` tiles.
2. For each tile, stream the matching A rows and B columns in K slices. An
   INT8 sparse beat takes 32 positions; an FP16 dense beat takes 8. Pad K
   with zeros to a whole number of beats.
3. Read D when `out_valid` rises.

Everything around the core is outside this design: where A, the indices, B
and C are stored, and how tiles are scheduled. In a GPU, registers and the
memory system play that role. The end-to-end testbench plays it here.

A 2:4 matrix is prepared in software, before it reaches the hardware:

* **Pruning.** In each group of four, keep the two values of largest
  magnitude. A network is then retrained with the pattern held fixed.
* **Compression.** Store the values and indices as described above.
* **Optional column permutation.** Reorder A's columns before pruning so that
  large weights do not crowd into the same groups. To keep `A x B`
  unchanged, B's rows must be permuted the same way.

`tb/sparse_tb_pkg.sv` models pruning and compression. The end-to-end
testbench reproduces a published permutation example: a 4 x 8 matrix whose
pruned magnitude rises from 83.7 to 102.9 when its columns are reordered. It
also checks in hardware that permuting A's columns together with B's rows
leaves `A x B` unchanged.

## What is taken from the source design and what is not

From the source design:

* the 2:4 pattern and the compressed format: two values and two 2-bit
  indices per group, with padding for sparser groups;
* B operands selected by metadata, so that half the multipliers cover the
  full K;
* the formats INT8/INT32, FP16/FP32, FP16/FP16, BF16/FP32, and TF32/FP32
  with a 1:2 pattern;
* the factor of two between sparse and dense throughput.

Choices made here:

* the tile shape, chosen to match the published INT8 rate;
* one 4:1 multiplexer per multiplier;
* the bit layout that shares slots between formats;
* dense mode using the first half of the B slice;
* the two-stage pipeline, the beat protocol and reset;
* signed INT8 with a wrapping accumulator;
* all floating-point rounding and summation-order rules.

Not built:

* FP32 inputs, other than as TF32;
* any memory, register file or scheduler around the core.

How far to trust it: every block is compared, bit for bit and cycle for
cycle, with independent models:

* INT8 results against plain integer dot products of the *uncompressed*
  matrices;
* floating-point results against a double-precision model that rounds to
  FP32.

These checks show that the RTL does what this document says. They do not
show that it matches the real Ampere unit in timing or in floating-point
rounding.

## Files

| file | content |
|------|---------|
| `rtl/sparse_pkg.sv` | constants of the 2:4 format, `mode_e`, `fmt_e` |
| `rtl/fp32_pkg.sv` | FP16/BF16/TF32 to FP32 conversion; FP32 multiply and add |
| `rtl/meta_select.sv` | metadata-driven B selector, INT8 |
| `rtl/fp_dot_sum.sv` | one beat's floating-point dot product, with B selection |
| `rtl/sparse_dot_unit.sv` | one lane: selection, multipliers, sum, accumulator |
| `rtl/sparse_tensor_core.sv` | the core (top level) |
| `tb/sparse_tb_pkg.sv` | pruning and compression models |
| `tb/fp_ref_pkg.sv` | reference floating-point model |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops by itself. For
example, to run the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_sparse_tensor_core \
  rtl/sparse_pkg.sv rtl/fp32_pkg.sv tb/sparse_tb_pkg.sv tb/fp_ref_pkg.sv \
  rtl/meta_select.sv rtl/fp_dot_sum.sv rtl/sparse_dot_unit.sv rtl/sparse_tensor_core.sv \
  tb/tb_sparse_tensor_core.sv -o sim && ./obj_dir/sim
```

The other testbenches (`tb_meta_select`, `tb_fp_dot_sum`,
`tb_sparse_dot_unit`) are built the same way from the files they use.

On changing parameters:

* `TM` and `TN` change the tile freely.
* `KH` must be even for INT8 and a multiple of 8 for the floating-point
  formats, which need whole 32-bit words per A row.
* The floating-point formats assume 8-bit slots (`DW = 8`) and a 32-bit
  accumulator (`AW = 32`).
