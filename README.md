# A fused-dot-product systolic array for numerically tailored GEMM

A matrix product C = A x B is a grid of dot products. A conventional unit
computes each dot product with a chain of floating-point FMAs and rounds
after every step. How much precision is needed varies a lot between
workloads. Ill-conditioned scientific codes need more than binary64. Neural
network inference can do with far less than binary32.

This RTL implements the alternative. Each processing element (PE) multiplies
two floating-point operands exactly. It shifts the product into a wide
**fixed-point accumulator** and adds it there. It rounds only once, when the
dot product is finished. The accumulator's window is a design parameter,
written `<OVF, MSB, LSB>`:

* `LSB` is the weight of the lowest bit kept (2^LSB). Product bits below it
  are dropped.
* `MSB` is the weight of the highest bit a single product may reach (2^MSB).
* `OVF` is the number of guard bits above MSB. They absorb the growth of the
  sum, so up to about 2^OVF products of full size can be added without
  overflow.

The accumulator is `OVF + MSB - LSB + 1` bits wide. For example, the
`<30,30,-30>` window is 91 bits, and the default `<2,5,-30>` window is
38 bits. You trade precision and range against area and energy by choosing
these three numbers. The operand format does not change the scheme.

The default configuration is a **32 x 31 array of bfloat16 PEs with a
`<OVF=2, MSB=5, LSB=-30>` accumulator**. It computes one 32 x 31 tile of C
per block of k-slices.

## Files

| file | contents |
|---|---|
| `rtl/fdp_pkg.sv` | default sizes and two width helpers |
| `rtl/systolic_array.sv` | top level: skew, decode, PE grid, output conversion, de-skew |
| `rtl/fdp_pe.sv` | one fused-dot-product PE |
| `rtl/seg_accumulator.sv` | carry-save accumulator, radix 2^K |
| `rtl/a2s3.sv` | operand decoder: arithmetic format to S3 fields |
| `rtl/s3a.sv` | result encoder: accumulator to arithmetic format, round to nearest even |
| `rtl/delay_line.sv` | register chain used for skew and de-skew |
| `tb/fdp_ref_pkg.sv` | reference model of the arithmetic, based on real numbers |
| `tb/tb_*.sv` | one self-checking testbench per module, plus end-to-end tests |

## Top-level interface and timing (`systolic_array`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `in_valid` | in | 1 | a k-slice is present on `a_row`/`b_col` |
| `in_eob` | in | 1 | this slice is the last of the block (end of block) |
| `a_row[N]` | in | 1+WE+WF | A[i][k] for rows i = 0..N-1 |
| `b_col[M]` | in | 1+WE+WF | B[k][j] for columns j = 0..M-1 |
| `c_valid` | out | 1 | one row of C is on `c_col` |
| `c_col[M]` | out | 1+WE+WF | C[i][j] for all columns of one row |

The host streams a block as one slice per valid cycle, k = 0..K-1, and marks
the last slice with `in_eob`. Bubbles (`in_valid` low) may appear anywhere.
The first slice of the next block may follow the EOB slice in the very next
cycle. Each block yields a new tile; no accumulator state carries over.

Results appear **bottom row first**. If the EOB slice is presented in cycle
t0, row N-1 of C is on `c_col` in cycle t0+N+M+3. The other rows follow one
per cycle, and row 0 comes out in cycle t0+2N+M+2. A host that wants the
rows in natural order must reverse each group of N rows.

**Constraint:** two EOB slices must be at least N cycles apart. With no
bubbles, this means a block has at least N slices; pad shorter dot products
with zeros. An assertion in `systolic_array` and in every PE checks this
rule.

## How the array works

```
            b_col[0]   b_col[1] ... (column j delayed j cycles, then A2S3)
               |          |
a_row[0] -> PE(0,0) -> PE(0,1) -> ...     a: to the right, 1 cycle per PE
               |          |               b: downward,     1 cycle per PE
a_row[1] -> PE(1,0) -> PE(1,1) -> ...     control: along row 0, then down
 (row i delayed i cycles, then A2S3)      results: downward, 2 cycles per PE
               |          |
              S3A        S3A   (one per column)
               |          |
        de-skew M-1-j cycles -> c_col[j]
```

* **Skew.** Row i of A is delayed i cycles and column j of B is delayed j
  cycles. Because of this, A[i][k] and B[k][j] reach PE(i,j) in the same
  cycle, i+j cycles after the slice entered.
* **Decode (A2S3).** Each operand is split into the "S3" fields the PE
  uses: NaN flag, flush-to-zero flag, sign, biased exponent ("scale"), and
  significand with its implicit bit. The decoder is registered.
* **Control.** The pair (valid, eob) enters at PE(0,0). It travels along
  row 0 and then down every column, so it arrives at each PE together with
  that PE's operands.
* **Output chain.** At EOB each PE injects its finished accumulator into
  the output chain of its column. The chain is made of two registers per PE,
  and results move one PE down every two cycles. The EOB reaches the PEs of a
  column one cycle apart, from top to bottom. The slower chain therefore
  gives every injection a free slot: the value from PE(p) reaches PE(i) in
  cycle 2i-p, which is distinct for every p. This is why the bottom row comes
  out first. It is also why EOBs must be N cycles apart: by then the previous
  block has fully drained from every chain.
* **Encode (S3A).** Below each column, the carry-save result is resolved,
  normalised and rounded to the output format.
* **De-skew.** Column j is delayed M-1-j cycles, so that a whole row of C
  leaves in the same cycle.

## Inside a PE (`fdp_pe`)

Stage 1 multiplies and aligns the product. Stage 2 accumulates it.

1. **Exponent sum.** `es = scale_a + scale_b`, an unsigned adder of WE+1
   bits.
2. **Significand product.** `P = sig_a * sig_b`, an unsigned multiplier of
   2WF+2 bits. The product is exact.
3. **Shift value.** `u = es - (2*BIAS + LSB - 2)`. This is where the
   product's least significant bit lands in a shifter whose bit 2WF+2 weighs
   2^LSB. Two flags come from u:
   * `too_small` when u <= 0: every product bit is below 2^LSB. The product
     counts as zero.
   * `too_big` when u > MSB-LSB+1: the product's top bit could lie above
     2^MSB. This sets the NaN flag.

   Both flags depend on the exponents only. A product whose significand is
   below 2 can therefore be flagged too big even though it would fit.
4. **Negation before the shift.** `sP = (sign_a ^ sign_b) ? -P : P`. Bits
   below LSB are dropped after negation. A partly truncated negative product
   therefore rounds toward minus infinity, not toward zero.
5. **Shift and part-select.** The sign-extended sP is shifted left by u.
   Bits `[W+2WF+1 : 2WF+2]` are the W-bit addend. The sign extension fills
   the OVF guard bits.
6. **Accumulate.** The `seg_accumulator` adds the addend. The addend is
   forced to zero when the slice is not valid, when an operand is flushed to
   zero, when an operand is NaN, or when the product is too small or too big.
7. **Flags and EOB.** A sticky NaN flag collects NaN operands and too-big
   products during a block. At EOB, the value after the last addition is
   sent to the output chain, together with the NaN flag. In the next cycle
   the accumulator starts again from zero.

A PE latency, from operands at its inputs to the result in its output
chain, is 3 cycles: stage 1, accumulate, then the second chain register.

### The carry-save accumulator (`seg_accumulator`)

A 38-bit or 91-bit adder in a feedback loop would limit the clock. The
accumulator is therefore cut into segments of K bits (K = 16 by default).
Each segment is a small ripple-carry adder. In each cycle it adds three
things: its stored bits, its slice of the addend, and the carry that the
segment below produced in the previous cycle. Carries thus move one segment
per cycle and never ripple far.

The accumulator's true value is `sum + sum_s carry[s] * 2^(K(s+1))`,
modulo 2^W. The carries are not resolved inside the PE. They travel with
the sum down the output chain, and S3A adds them with a single W-bit
addition. The carry out of the top segment is discarded, so a sum that
exceeds the OVF guard bits wraps around silently.

### Rounding (`s3a`)

The converter does the following:

1. Resolves the carries.
2. Takes the magnitude and finds the leading one at position p. The
   exponent is `p + LSB + BIAS`.
3. Keeps WF bits below the leading one and rounds to nearest, ties to even.
4. Handles special cases:
   * NaN gives a quiet NaN (`0x7FC0` for bfloat16).
   * An exponent at or above the all-ones code gives infinity.
   * A result below the smallest normal is flushed to a signed zero.
   * An exact zero gives +0.

With the default window, every non-zero result lies between 2^-30 and 2^8.
It is always a normal bfloat16, so the last two cases never happen.

## Parameters

All modules take the same arithmetic parameters. Their defaults come from
`fdp_pkg`.

| parameter | default | meaning |
|---|---|---|
| `N`, `M` | 32, 31 | PE rows and columns (top only) |
| `WE`, `WF` | 8, 7 | exponent and fraction bits of the operand format (bfloat16); 8, 23 is binary32 |
| `MSB`, `LSB`, `OVF` | 5, -30, 2 | accumulator window |
| `K` | 16 | segment width of the carry-save accumulator |

The operand format must be IEEE-754-like: a sign bit, a biased exponent, and
a fraction with an implicit one. Output words use the same format as input
words.

## Where this RTL departs from, or adds to, the published design

What follows the published design:

* The array size, operand format and accumulator of the main configuration
  (32 x 31, bfloat16, `<5,-30,2>`).
* The accumulator width rule, `OVF + MSB - LSB + 1`.
* Rounding only once, at the end of a dot product.
* The skewed row and column inputs, with A2S3 decoders and S3A encoders at
  the array edges, and the de-skew register chains.
* Inside the PE: the exponent adder, the significand multiplier, the
  shift-value generator with its too-small and too-big flags, negation
  before the barrel shift, the MSB..LSB part-select with OVF sign extension,
  the sticky NaN flag, the EOB signal, and the segmented carry-save
  accumulator.

The following are choices made here:

* **Window order.** The array is published as "<5,-30,2>" without field
  names. This RTL reads it as MSB=5, LSB=-30, OVF=2. The width, 38 bits, is
  the same under any reading that keeps -30 as LSB.
* **Segment width.** K = 16 is a choice made here.
* **Timing.** All pipeline depths and latencies are choices made here. The
  original flow lets an arithmetic-core generator insert pipeline stages to
  meet a target frequency on a target FPGA. This RTL has a fixed, shallow
  pipeline with no frequency target.
* **Control path and output chain.** The way control reaches the PEs, the
  two-register output chain, and the N-cycle spacing rule for EOB slices are
  this design's own. The published figure shows the results flowing down the
  columns, but not how.
* **Special values.** Infinities are treated as NaN, and subnormal inputs
  are flushed to zero. Overflow of the OVF guard bits wraps without a flag.
  The output is rounded to nearest even, and results are bottom-row first.
* **Operand formats.** Only IEEE-like formats are decoded. Posit operands,
  which the operator family also supports, are not.
* **Not included.** The host link is not part of this RTL (OpenCAPI
  transceivers, address translation, DMA, host memory and the bus wrapper
  around the array). `systolic_array` is the whole accelerator core. Its
  ports are plain streams that a wrapper would feed from buffers of A and B
  and drain into a buffer of C.

## Verification

Every module has a self-checking testbench. Each one ends with a line
`TB_RESULT checks=<n> failures=<n>`. The reference model
(`tb/fdp_ref_pkg.sv`) does not reuse the RTL's bit manipulations:

* It converts operands to `real`.
* It multiplies in double precision, scales by 2^-LSB and takes `$floor`.
* It sums in a `longint` wrapped to W bits.
* It rounds the final value by operating on the binary64 bit pattern.

This is exact as long as the accumulator is at most 53 bits wide and the
product of two significands is at most 53 bits.

| testbench | what it covers |
|---|---|
| `tb_delay_line` | depth 3 and depth 0, exact delay |
| `tb_a2s3` | all fields for random, zero, subnormal, infinite and NaN bfloat16 and binary32 words |
| `tb_seg_accumulator` | random addends and restarts; value checked each cycle, for K = 8 and 16 |
| `tb_fdp_pe` | random blocks with bubbles and special operands; result value, NaN flag, 3-cycle latency, forwarding and chain pass-through |
| `tb_s3a` | random values in random carry-save splits; exact ties, extremes, NaN |
| `tb_systolic_array` | end to end, 4 x 3 PEs, K = 8; 40 blocks, some back to back; every C element checked, value and cycle |
| `tb_systolic_array_fp32` | the same test with binary32 operands and the `<9,6,-20>` accumulator |
| `tb_systolic_array_full` | the same test at the default 32 x 31 bfloat16 configuration, 3 blocks |

The end-to-end tests count the events they cause, and fail if any count is
zero:

* NaN operands
* too-big products
* too-small products
* flushed zeros
* negative products
* back-to-back blocks
* bubbles
* rounded (inexact) results
* segment carries

The configuration with a 91-bit accumulator is beyond the reference model
and has not been simulated. This is the `<30,30,-30>` window used for the
sea-surface-height dot products, with binary64 operands.

To simulate with Verilator, for example the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/fdp_pkg.sv tb/fdp_ref_pkg.sv rtl/*.sv tb/tb_systolic_array.sv \
  --top-module tb_systolic_array
./obj_dir/Vtb_systolic_array
```

At the default size, `tb_systolic_array_full` takes about a minute and a
half to build and well under a second to run.
