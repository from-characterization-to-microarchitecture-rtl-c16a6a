# A reliable block-floating-point matrix core

Block floating point (BFP) gives a group of numbers one shared exponent.
Each number then keeps only a short fixed-point mantissa. This core uses a
specific grouping. Every row of the left matrix A is one block, and every
column of the right matrix B is one block. With that choice, a result
element C(i,j) is the integer dot product of two mantissa vectors, scaled
by 2^(eA_i + eB_j). The mantissa work and the exponent work come apart
completely:

* **Mantissas** run through an ordinary fixed-point systolic array. Its
  arithmetic is exact integer arithmetic, so an algorithm-based checksum
  (ABFT) can verify it with no rounding tolerance and no false alarms.
* **Exponents** need only one addition per result element:
  E_c = E_a·1ᵀ + 1·E_b. A row of N adders does this far faster than the
  array does its multiply. That slack is used to compute the exponents a
  second time, with the operands paired differently, and to compare the two
  results.
* **Format converters** (BF16 → BFP at the input, BFP → FP32 at the output)
  are small. They are simply duplicated, and the two copies are compared
  bit by bit (DMR, dual modular redundancy).

So each of the three parts gets the cheapest detector that suits its
arithmetic. The RTL is a single DIM × DIM tile engine with DIM = 128 by
default. It takes two BF16 matrices, returns their product as FP32 rows,
and raises one error flag per detector.

```
 a_fp rows ──► fp2bfp_dmr (A) ──mant──►┐
                      └──exp──────────►│  exp_unit_array  (2 runs + compare) ──► E buffer ─┐
 b_fp cols ──► fp2bfp_dmr (B) ──mant──►│                                                  │
                      └──exp──────────►┘                                                  ▼
                        mant_array (DIM x DIM PEs + ABFT) ── acc rows ──► bfp2fp_dmr ──► out_fp rows
```

## Number format

| item | width | notes |
|---|---|---|
| input element | BF16 | sign, 8-bit exponent, 7-bit fraction |
| shared exponent | 8 bit | the largest exponent in the block |
| BFP mantissa | 8-bit two's complement | 7 magnitude bits |
| accumulator | 22 bit signed | |
| exponent sum | 9 bit | eA + eB, both biased |
| output element | FP32 | |

An element with exponent e_i in a block with shared exponent e_sh gets this
mantissa:

    m = ±( {1,frac} >> (e_sh − e_i + 1) )

The hidden one is included. The extra shift by one keeps the largest
element within 7 magnitude bits. Bits shifted out are truncated. Zeros and
subnormals become 0. Inf and NaN are not treated specially.

A product of two mantissas is at most 127·127. A sum of 128 of them is
less than 2^21, so 22 signed bits can never overflow at DIM = 128. The
value of an accumulator `acc` with exponent sum `es` is:

    acc · 2^(es − 2·127 − 2·6)

The output converter finds the leading one at bit position p. The FP32
exponent is then es + p − 139. The mantissa is normalised by a shift. It
is exact, because 22 bits fit in the 24-bit FP32 significand. Results that
are too small flush to a signed zero. Results that are too large become
infinity.

The reference model in `tb/bfp_ref.svh` computes the same quantities
independently: the block maximum, the aligned mantissa, and the FP32 value
of acc·2^k (computed with `real` arithmetic).

## The mantissa array and its in-flight checksum (`mant_array`)

This is the hardest part to follow. It is also where most of the cycle
bookkeeping lives. The array is DIM × DIM `sa_pe` cells, and it supports
both common dataflows. `mode` is sampled at `start`.

**ABFT identity.** Let s = 1ᵀA be the vector of column sums of A. Then
s·B = 1ᵀ(AB) = the column sums of C. In OS mode the accumulators start
from a bias C0, so the column sums of C0 are added as well. The check
vector s is appended to A as one extra row, "row DIM". The array then
produces s·B alongside the real results. A checker at each column compares
that product with the sum of the column's results. All values are integers,
so the comparison is exact, taken modulo 2^22. The checksum of DIM values
needs log2(DIM) more bits than a mantissa. For that reason the A path
inside the array is 8 + log2(DIM) bits wide, which is 15 at DIM = 128.

### Weight-stationary (WS)

1. **Preload.** `w_we` writes column j of B into PE column j, one column
   per cycle.
2. **Stream A.** The rows of A enter on consecutive cycles. Element k is
   skewed by k cycles. Then it passes an `abft_ingress` adder-register,
   which adds it to a running sum. One cycle after the last row, that
   adder-register inserts the sum into the same stream. The check row
   therefore follows A through the array like a data row.
3. **Drain.** Partial sums move downwards. Row i of C leaves the bottom,
   is de-skewed, and appears on `out_vec`. If the first row enters at cycle
   c = 0, rows 0..DIM−1 come out at c = 2·DIM … 3·DIM−1.
4. **Check.** `abft_col_checker` j adds up the results of column j. When
   the check row arrives, it compares. `done` comes at c = 3·DIM+2.

### Output-stationary (OS)

1. **Clear and bias.** `clr` zeroes the accumulators. `bias_we` can then
   add a bias row into any PE row. The same row is added into the extra
   bottom row of check-PEs, which thereby holds the bias column sums.
2. **Stream.** Row i of A and column i of B enter together for DIM
   cycles. Parallel-load shift registers skew them, so that A(i,k) and
   B(k,j) meet in PE (i,j) at cycle k+i+j+1.
3. **Check path.** An `os_check_chain` on the left edge adds up the A
   values entering each row, one stage per row. It is timed to match the
   array latency, so Σᵢ A(i,k) reaches the check-PE row exactly when
   B(k,·) does. The check-PEs accumulate s·B.
4. **Drain.** From c = 3·DIM the accumulators shift down one row per
   cycle. The check row comes out first and the checkers latch it. Then
   come rows DIM−1..0. Row DIM−1 appears at c = 3·DIM+1, and row 0 at
   c = 4·DIM. `done` comes at c = 4·DIM+2.

In both modes the checksum adds only two cycles to the tile. One inserts
the check vector, and one does the final comparison.

`tb/tb_mant_array_fig10.sv` runs a 2 × 2 example in both modes and checks
the intermediate checksums. Its numbers are A = [[1,2],[3,4]],
B = [[5,6],[7,8]] and bias [[2,1],[0,1]]. That gives s = [4,6],
s·B = [62,72] and bias column sums [2,2].

## The exponent array and its second run (`exp_unit_array`, `exp_unit`)

Each `exp_unit` (EU) holds:

* an adder;
* an `Exp_A` register, which is one stage of a serial chain;
* an `Exp_B` register, which can load from a preload bus or from the EU
  next to it;
* two multiplexers.

The N EUs work as follows. Call p the stationary vector and s the
streamed vector. In WS, p is the exponents of B and s is the exponents of
A; in OS the roles are swapped.

* **Preload.** p_c goes into the `Exp_B` of EU c.
* **First run (N cycles).** s_r arrives one per cycle and is broadcast to
  every adder. So row r of E = s·1ᵀ + 1·p is produced in one cycle and is
  written into an N × N buffer. At the same time s_r is shifted into the
  `Exp_A` chain. At the end, EU j holds s_(N−1−j).
* **Second run (N cycles).** Each EU adds its own `Exp_A` to its `Exp_B`.
  After every step, the `Exp_B` registers rotate as a ring: EU j takes the
  value from EU j−1, and EU 0 takes it from EU N−1. At step k, EU j
  computes E(N−1−j, (j−k) mod N). The error detector compares that value
  with the same buffer element, which was computed in the first run by
  adder (j−k) mod N. Apart from step 0, each element is therefore
  recomputed on a different adder, so a permanent fault in one adder
  shows up as a mismatch instead of repeating itself. After N
  steps the ring is back in its preload order.
* `done` comes 2N cycles after the first streamed value. That is well
  inside the array's 3N+2 (WS) or 4N+2 (OS). The buffer is read by row in
  WS, and by column (`rd_transpose`) in OS.

## Converters with duplication (`fp2bfp_conv`, `bfp2fp_conv`, `*_dmr`)

`fp2bfp_conv` finds the block's maximum exponent, subtracts each element's
exponent from it, and right-shifts each significand. `bfp2fp_conv` uses a
leading-zero count, then a normalising shift, then an exponent update.
Each has one register stage.

The `_dmr` wrappers instantiate two copies and compare every output bit.
The error flag is raised when either copy reports valid and the two copies
differ. The design uses two FP→BFP converters, one for A and one for B, and
one BFP→FP converter for the result rows.

## Top level (`bfp_npu_top`)

Ports:

* `mode` (`DF_WS` or `DF_OS`), `start`, `in_valid`
* `a_fp[DIM]` and `b_fp[DIM]` (BF16)
* the result outputs `out_valid`, `out_row`, `out_fp[DIM]` (FP32)
* `busy`, `done`
* `err`, a struct with four sticky flags: `f2b`, `mant`, `expo`, `b2f`
* five `fault_t` inputs, which are test hooks (see below)

Protocol:

* **WS.** After `start`, send the DIM columns of B on `b_fp`. Each needs
  `in_valid`; they may be spaced out. Each column is converted. Its
  mantissas are preloaded into a PE column, and its exponent is preloaded
  into an EU. Then send the DIM rows of A on `a_fp` on consecutive cycles.
  Their exponents stream into the EU array while their mantissas enter
  the array.
* **OS.** After `start`, send row i of A and column i of B together on DIM
  consecutive cycles. The A exponents are preloaded into the EUs. The B
  exponents are held in a register vector and streamed once the preload
  has finished. The exponent buffer is then read transposed. No bias is
  applied at this level; the accumulators start from zero.
* **Output.** Each accumulator row from the array is paired with its
  exponent-sum row and converted to FP32. Rows come out in order
  0..DIM−1 in WS and DIM−1..0 in OS, and `out_row` names each one. When
  the inputs follow `start` back to back, `done` comes 4·DIM+5 cycles
  after `start` in both modes.

Concurrent assertions check the following:

* the A rows arrive back to back;
* in OS, the exponent sums are complete before the first result row is
  converted;
* the exponent array finishes before the mantissa array;
* the mantissa array is idle whenever the top level is;
* inside `mant_array`, `start` is not raised while the array is busy.

## Detection latency

Each detector fires at a fixed point in the tile:

| detector | when a fault shows on `err` |
|---|---|
| FP→BFP DMR | 1–2 cycles after the faulty input vector |
| exponent re-computation | within 2·DIM cycles after the first streamed exponent, before the tile ends |
| mantissa ABFT | at the end of the tile, together with `done` (4·DIM+5 cycles after `start`) |
| BFP→FP DMR | 1–2 cycles after the faulty result row is converted |

The source design reports its worst-case detection latencies in
microseconds. In those numbers, the array and exponent-path latencies grow
with the array size, while the converter latencies stay constant. The
cycle counts above follow the same pattern. The clock frequency is not
known, so the two cannot be compared directly.

## Fault-injection hooks

Every detector has a `saboteur` in front of it, as a test hook. A
`fault_t` says where the saboteur acts (`row`, `col`) and how. It can flip
the bits set in `mask`, force them to 0, or force them to 1. It acts only
while `en` is set. The hooks are:

| hook | where it acts |
|---|---|
| `fi_f2b_a` / `fi_f2b_b` | one lane of converter copy 0 |
| `fi_mant` | the accumulator output of PE (row, col); row DIM is the check-PE row |
| `fi_exp` | the sum of EU `col` |
| `fi_b2f` | one lane of output-converter copy 0 |

Tie all of them to `'0` in normal use; they then cost only a multiplexer
per protected bit.

## Where this RTL departs from the source design, or goes beyond it

* **Numeric formats.** BF16 in, FP32 out, and 8-bit mantissas are this
  design's choices. So are truncation and the flush/saturate rules. The
  22-bit accumulator and the row/column blocking are the source design's.
* **Host system.** The original core sits inside a larger NPU, with a
  scratchpad, DMA, a host CPU and instruction decoding. None of that is
  here. The top level takes whole rows and columns on wide ports.
* **Bias.** The OS bias path is built and tested in `mant_array`, but the
  top level does not expose it.
* **Cycle schedule.** The schedule, the skew/de-skew registers and the
  feeders are this design's own. So are the exponent buffer and the order
  in which the second exponent run is compared.
* **Error handling.** Only detection is built. A detected error sets a
  flag; moving to a safe state or re-executing is left to the system.
* **Converter protection.** The lighter "check only the bits that matter"
  protection was considered for the converters in the source design and
  rejected in favour of DMR. It is not built.
* **Fault-injection ports.** These are an addition for verification.

## Verification and simulation

Every module has a self-checking testbench in `tb/`. Each one:

* compares the module's outputs with values computed independently;
* checks cycle counts where a latency is defined;
* has a watchdog;
* ends by printing `TB_RESULT checks=<n> failures=<m>`.

The end-to-end testbench `tb_bfp_npu_top` runs at DIM = 8. It runs
random WS and OS tiles and compares every output with the reference model.
It also covers:

* elements that need an alignment shift of more than one place;
* all-zero blocks;
* both dataflows, one after the other in the same run;
* one fault in each of the four protected parts, each of which must be
  flagged while fault-free tiles raise no flag.

It counts each of these events and fails if one never happened.
`tb_bfp_npu_mid` runs the same test body (`tb/npu_tb_body.svh`) at
DIM = 32, with the fault tiles included. Changing its `DIM` to 64, the
middle configuration of the source design, also passes: 12,323 checks.
That build takes about five minutes. 64 is the largest size simulated.
The default 128 × 128 core has not been simulated end to end. Its C++ model is too large to compile in reasonable
time: the build had not finished after ten minutes on four cores. The
core differs from the smaller ones only in `DIM`, and every datapath
width that depends on it is derived from `DIM`.

To build and run a testbench with Verilator 5:

```sh
verilator --binary --timing --assert -Irtl -Itb \
    rtl/bfp_pkg.sv rtl/saboteur.sv rtl/fp2bfp_conv.sv rtl/fp2bfp_dmr.sv \
    rtl/bfp2fp_conv.sv rtl/bfp2fp_dmr.sv rtl/exp_unit.sv rtl/exp_unit_array.sv \
    rtl/sa_pe.sv rtl/abft_ingress.sv rtl/os_check_chain.sv rtl/abft_col_checker.sv \
    rtl/mant_array.sv rtl/bfp_npu_top.sv tb/tb_bfp_npu_top.sv --top-module tb_bfp_npu_top
./obj_dir/Vtb_bfp_npu_top +verilator+rand+reset+2
```

Replace the testbench file and the top module name to run another
testbench. Each one checks its result at the end, whatever values the
registers start from.

At the default size, a Verilator lint of `bfp_npu_top` takes about four
minutes and a few GB of memory. The simulation model takes much longer
to build, for the reason given above.

To change the array size, override `DIM` on `bfp_npu_top` (for example 16
or 64, the other sizes the source design was evaluated at). Nothing else
needs to change.
