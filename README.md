# MxGLUT: one lookup-table array for FP8-INT4 and FP8-FP8 GEMM

Quantised LLM inference needs two kinds of matrix product. Linear layers
multiply FP8 activations by 4-bit integer weights, while attention (QKᵀ and AV)
multiplies FP8 by FP8. The workload also changes with the phase:

- **Prefill** is a large, compute-bound matrix–matrix product. Its cost is in
  accumulating partial sums.
- **Decode** is memory-bound and GEMV-like. Its cost is in fetching weights.

This RTL implements one array that runs both precisions with no
floating-point multiplier. It also switches its dataflow for each kernel:
**output stationary (OS)** for prefill and **weight stationary (WS)** for
decode.

The central idea is the same in both precisions:

- Every multiplication is moved into building a small table from the
  activation.
- Each table is built **once per array row** and then **broadcast** to all
  64 accumulators of that row.
- An accumulator only selects a table entry with its weight bits, fixes the
  sign and exponent, and adds the result to an FP32 sum.

Because every row receives its table directly, activations never travel
between neighbouring processing elements. This removes the diagonal
fill/drain skew of a systolic array on the activation side: only N(N−1)/2
delay registers are needed, and a kernel's compute phase ends 2N+1 cycles
after it starts (N = array size).

All SystemVerilog is in `rtl/` (synthesizable) and `tb/` (self-checking
testbenches). The default configuration is a 64 × 64 array with 384 KB of
ping-pong SRAM.

---

## 1. Turning products into table lookups

### 1.1 FP8 × INT4: binary-coded weights

A 4-bit weight code u is split into bit planes. Each bit b ∈ {0, 1, 2, 3}
is read as a sign, s_b = +1 for a 1 and −1 for a 0, so the code stands for
Σ_b 2^b·s_b = 2u − 15. The per-group scale factor and zero point are applied
by the quantiser outside the array.

Activations are grouped four at a time (a1..a4). For one group and one bit
plane, each output column needs

    ±a1 ± a2 ± a3 ± a4        (signs taken from the 4 weights of the column)

There are 16 sign patterns, but they come in negated pairs. So a table of
**8 entries**, all with +a1, is enough:

| index `[2:0]` | entry            |
|---------------|------------------|
| 7 (111)       | a1 + a2 + a3 + a4 |
| 6 (110)       | a1 + a2 + a3 − a4 |
| 5 (101)       | a1 + a2 − a3 + a4 |
| …             | …                |
| 0 (000)       | a1 − a2 − a3 − a4 |

Index bits 2, 1 and 0 are the signs of a2, a3 and a4 (1 = plus).

A column's 4-bit plane code is c = {s1, s2, s3, s4}. When s1 = 1 the
accumulator reads entry c[2:0]. When s1 = 0 it reads entry ~c[2:0] and
negates it.

`int4_lut_gen` builds the eight entries with six **shared add/subtract
units** (`sfasu`). Each unit returns both x+y and x−y from one exponent
compare and one alignment:

- Level 1 forms a1 ± a2 and a3 ± a4.
- Level 2 forms the four sum/difference pairs of those results.

Every result is rounded back to FP8.

The weight of bit plane b is 2^b. That scaling is applied **once per table
entry**, in the LUT block, by adding b to the entry's exponent. It is not
applied once per accumulator. In OS mode the LUT block holds a loaded table
for B = 4 consecutive cycles, with b = 0, 1, 2, 3.

**Weight reinterpretation** happens off-chip. The code that the array sees for
plane b, group g and column k is

    code = { W[4g][k][b], W[4g+1][k][b], W[4g+2][k][b], W[4g+3][k][b] }

The testbenches do this step when they generate data.

### 1.2 FP8 × FP8: a mantissa table

An E4M3 product is (−1)^(sa⊕sw) · 1.ma · 1.mw · 2^(ea+ew−14). Only the
mantissa product needs a multiplier, and 1.mw takes just eight values. So
`fp8_lut_gen` builds eight entries from the activation alone. Entry q holds
1.ma × 1.q:

- The product is normalised; δ is 1 when it is ≥ 2.
- It is rounded to a 3-bit fraction, to nearest with ties away from zero.
- It is stored as `{E_LUT[4:0], m[2:0]}`, where E_LUT = ea + δ − 7 + carry.
  The carry is set when rounding overflows 1.111 to 10.000.

The activation's sign and zero flag travel beside the table.

The accumulator then:

- selects the entry with the weight's mantissa,
- sets sign = sa ⊕ sw,
- adds the exponents: the FP32 exponent is E_LUT + ew + 120.

### 1.3 Number formats

| quantity | format | rules used here |
|---|---|---|
| activations, FP8 weights, INT4-mode table entries | E4M3, bias 7 | exponent field 0 is zero (flush to zero); no NaN/Inf codes; overflow saturates to 1.111·2⁸ = 480 |
| FP8-mode table entries | 5-bit signed exponent + 3-bit fraction | exponent range −6..10 |
| products | exactly representable in FP32 | no rounding |
| partial sums | IEEE FP32 | add rounds to nearest even, flush to zero, saturates to the largest finite value; no NaN/Inf |

Accumulation is therefore exact except for one FP32 rounding per addition.
The result depends on the order of the additions:

- **OS** adds group by group, and within a group plane by plane.
- **WS** finishes one whole bit plane over all rows before it starts the
  next plane.

The reference models in `tb/tb_fp_pkg.sv` follow the same order.

## 2. Block structure

```
mxglut                         accelerator core (top)
├── rlb_ctrl                   kernel sequencer (OS / WS, INT4 / FP8)
├── sram_pp ×16 activation     8 KB, 128-bit, two banks
├── sram_pp ×16 weight         8 KB, 32-bit,  two banks
├── sram_pp ×16 output         8 KB, 128-bit, two banks
└── mxmpu                      64 × 64 array, per-row activation skew
    └── mxlpe ×64              one row
        ├── lut_gen            int4_lut_gen (6 × sfasu) | fp8_lut_gen
        ├── lut_block          table register, per-entry 2^b shifter, plane FSM
        └── rac ×64            select, sign/exponent fix, fp32_add, registers
mx_pkg                         shared types: fp8_t, lut_ent_t, prec_e, df_e
```

Every file starts with a comment that describes its interface and its
cycle-level timing.

## 3. The array and its two dataflows

Each row (MxLPE) gets one 32-bit activation lane:

- FP8-INT4 mode: four FP8 activations per lane.
- FP8-FP8 mode: one FP8 activation, in bits 7:0.

Each column carries an 8-bit weight path and a 32-bit partial-sum path, both
running from the top to the bottom of the array. Row i receives its
activation i cycles late, through i skew registers. Weights and partial sums
also move down one row per cycle, so everything stays aligned.

A table loaded at cycle t is used from cycle t+1. The FP32 result is
registered at the end of that cycle.

### 3.1 Output stationary (prefill)

Each RAC keeps one output element. A kernel computes a 64 × 64 output tile
over G activation words:

- **RUN**, G·B cycles:
  - Weight word t is read each cycle and enters the top of the columns. It
    then moves down one row per cycle.
  - Activation word g is read every B cycles.
  - B is 4 in INT4 mode and 1 in FP8 mode.
- **WAIT**, ROWS+1 cycles: the bottom row finishes its last accumulation.
- **DRAIN**, ROWS cycles:
  - The partial-sum registers become a shift chain and shift down.
  - The bottom value is written to output word ROWS−1−d.

The start-to-done time is **G·B + (ROWS+1) + ROWS + 1 cycles**. With
G = N FP8 words, RUN + WAIT takes 2N+1 cycles. That matches the 2N+S−2
latency of a row-broadcast array with S = 3 pipeline stages (SRAM read,
table register, accumulate).

### 3.2 Weight stationary (decode)

Each RAC keeps one weight, and partial sums flow down the columns. For each
bit plane b (B planes in INT4 mode, one in FP8 mode):

- **PRE**, ROWS cycles: weight words b·ROWS … b·ROWS+ROWS−1 are shifted in.
  Word t ends in row ROWS−1−t. The weights are then held.
- **STREAM**, M cycles: activation vector m is read.
  - Its result leaves the bottom ROWS+1 cycles after it reaches the array,
    and is written to output word m.
  - For b > 0, output word m (holding plane b−1's sum) is read at the same
    time and enters the top of the partial-sum chain. The planes therefore
    accumulate in the output SRAM.
- **FLUSH**: wait until all M results of the pass have been written.

The start-to-done time is **B·(ROWS + M + ROWS + 3) + 1 cycles**.

### 3.3 Reductions longer than one SRAM bank

One bank holds 256 activation words and 1024 weight words. That limits one
kernel to a reduction depth of:

- OS, FP8-INT4: 1024;
- OS, FP8-FP8: 256;
- WS: 64 (one weight tile).

Two configuration bits let kernels be chained:

| | `cfg_acc` | `cfg_drain` |
|---|---|---|
| meaning | continue earlier sums | write the OS tile out |
| OS | do not clear the array; keep adding to the sums it still holds | at 0, the kernel ends after WAIT (no drain) |
| WS | also read the output SRAM in plane 0, so the kernel adds to what an earlier kernel left there | ignored |

- **OS chaining:** the host flips the input bank between kernels, and no
  partial sum leaves the array until the last kernel drains. This is the
  point of OS.
- **WS chaining:** only the input bank flips. The output bank stays, so the
  partial sums accumulate in place in the output SRAM.

Chained kernels may also mix precisions.

## 4. SRAM subsystem and word layouts

- There are 48 macros of 8 KB each:
  - 16 activation, 128-bit;
  - 16 weight, 32-bit;
  - 16 output, 128-bit.
- The macros of each group form one wide word: 2048-bit activation, 512-bit
  weight and 2048-bit output.
- Each macro has two banks. The compute side uses the bank chosen by
  `in_bank_sel` (activation and weight) or `out_bank_sel` (output). The DMA
  side uses the other bank.
- The compute side has one read and one write port, so a WS pass can read
  plane b−1's sum while it writes plane b's. The DMA side has one port.
- Reads are synchronous with one cycle of latency.

Word layouts (lane i/k is bits 32i+31..32i, or 8k+7..8k for weights):

| word | OS kernel | WS kernel |
|---|---|---|
| activation g / m, lane i | row i's group g: `{A[i][4g+3], …, A[i][4g]}` (INT4) or `A[i][g]` (FP8) | vector m, rows 4i..4i+3 (INT4) or row i (FP8) of the reduction |
| weight | word g·B+b, lane k: plane-b code of group g, column k (INT4, bits 3:0) or `W[g][k]` | word b·ROWS+t, lane k: code/weight of reduction row ROWS−1−t |
| output | word i: output row i, lane k = FP32 O[i][k] | word m: output vector m |

## 5. Kernel interface of `mxglut`

1. With `busy` low, assert `start` for one cycle together with:
   - `cfg_prec` (INT4 = 0, FP8 = 1);
   - `cfg_df` (OS = 0, WS = 1);
   - `cfg_len`: G activation words (OS) or M activation vectors (WS), at
     least 1;
   - `cfg_acc` and `cfg_drain`.
2. `busy` stays high until `done` pulses for one cycle.
3. The DMA ports (`act_dma_*`, `wgt_dma_*`, `out_dma_*`) may be used at any
   time on the banks that compute is not using.

An assertion in `rlb_ctrl` flags a kernel started with `cfg_len = 0`.

## 6. Verification

Every block has a self-checking testbench `tb/tb_<block>.sv`. Each one checks
against reference models written independently in `tb/tb_fp_pkg.sv` (real
arithmetic with explicit rounding). Each ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_sfasu` | all 65 536 operand pairs, sum and difference |
| `tb_fp8_lut_gen`, `tb_int4_lut_gen`, `tb_lut_gen` | all entries for exhaustive or random activations, including rounding carries and zeros |
| `tb_lut_block` | plane sequence, 2^b exponent shift, back-to-back loads, valid timing |
| `tb_fp32_add` | random adds of both signs against an exact real sum rounded to nearest even, plus large exponent differences |
| `tb_rac` | both precisions and both dataflows, sign MUX, weight shift, drain, clear |
| `tb_mxlpe` | one row in OS INT4 and WS FP8, including row-valid timing |
| `tb_mxmpu` | 4 × 4 array, OS INT4 GEMM with drain, WS FP8 GEMM with result timing |
| `tb_sram_pp` | ping-pong isolation, bank flip, one-cycle read latency, at 16-bit and full size |
| `tb_rlb_ctrl` | strobe sequences and start-to-done cycle counts of all modes, with a model of the array's result valid |
| `tb_mxglut` | 8 × 4 core end to end (see below) |
| `tb_mxglut_full` | the same sequence at default parameters (64 × 64, 384 KB), with OS kernels of 64 activation words and WS kernels of 16 vectors |
| `tb_mxglut_llama` | the same sequence with kernels as large as one bank allows: OS reduction depth 1024 (FP8-INT4) and 256 (FP8-FP8), chained to 2048 + 256; WS with 64 vectors (decode at batch 64) |

`tb_mxglut` runs four kernels back to back with ping-pong DMA: OS INT4, WS
FP8, OS FP8 and WS INT4. While the array computes, the next kernel's data is
loaded and the previous kernel's results are read. It then runs two chained
reductions (section 3.3). It checks:

- every output, bit for bit;
- every kernel's cycle count;
- that each mechanism actually happened. It counts these on the core's
  control signals: plane shifting, negative-code MUX, WS weight preload, WS
  partial-sum preload, OS drain, bank flip, OS continuation, WS accumulation.

The full-size test is the slowest to simulate: building the 64 × 64 model
takes about two minutes.

To simulate one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/mx_pkg.sv tb/tb_fp_pkg.sv $(ls rtl/*.sv | grep -v mx_pkg) \
    tb/tb_mxglut.sv --top-module tb_mxglut -Mdir obj_tb_mxglut
./obj_tb_mxglut/Vtb_mxglut +verilator+rand+reset+2
```

Replace `tb_mxglut` with any other testbench name. The package goes first,
and the file list may be cut down to the modules the testbench uses. Array size,
kernel lengths and the number of kernels of the end-to-end test are
localparams at the top of `tb_mxglut.sv`.

## 7. Departures from the published description, and limits

- **Table rounding.** The published description says the FP8-FP8 entries
  use round-to-nearest. One of its worked examples shows a truncated entry
  instead. This RTL rounds to nearest, with ties away from zero. The
  add/subtract units use the same rule; their rounding mode is not
  published.
- **Table exponent carry.** The published exponent formula for FP8-FP8
  entries (activation exponent + normalisation shift − bias) has no term
  for a rounding carry. Here the carry is added to the exponent, so an
  entry never holds a wrong power of two.
- **Negative INT4 codes.** The description says the low three weight bits
  select the entry and the top bit chooses between the entry and its
  negation. With the ±1 reading of the bits, a code with top bit 0 names
  the negation of the entry with the *inverted* low bits. So this RTL
  inverts the index when the top bit is 0. A flow that pre-inverts those
  bits off-chip would drop the three XOR gates per accumulator.
- **Special values.** Zero flushing, saturation and the absence of NaN/Inf
  are this design's choices, consistent with flush-to-zero of subnormals.
  Other choices would change results only at the range edges.
- **Sequencer, SRAM ports, word layouts and kernel configuration** are this
  design's own. These cover `cfg_len`, `cfg_acc`, `cfg_drain` and the
  separate input/output bank selects. Only the dataflow principles, the
  array size, the SRAM sizes, widths and two-bank organisation, and the
  32-bit/8-bit activation bus modes are given.
- **WS overlap.** The published dataflow illustration re-preloads each
  row's weights for the next bit plane while the rows below are still
  streaming the current plane. This RTL separates the phases: PRE, then
  STREAM, then FLUSH for every plane. The results are the same, but a plane
  costs 2·ROWS+3 extra cycles, so at M = 64 vectors the array is busy about
  a third of the time. Per-row staggered preload would need a per-row
  weight-load enable and a second weight register per RAC (to hold the old
  plane while the new one arrives); neither is described.
- **WS plane merge.** Each plane's results go to the output SRAM, and the
  next plane adds to them there (read and write in the same cycle on
  separate ports). The published text says all planes of a tile are merged
  in one pass but does not say where. This RTL uses the output SRAM.
- **Not included:**
  - the DMA engine, AXI interconnect, external memory interface,
    instruction controller and SoC-level FSM. Their connections are the
    top-level kernel and DMA ports.
  - the vector unit that runs softmax and layer normalisation.
  - the software that tiles a model into kernels.
- **SRAMs** are plain register arrays with synchronous read. A real
  implementation would replace `sram_pp` with foundry macros of the same
  interface.
