# A low-precision transformer engine for multilingual translation

Bhasha-Rupantarika is a translation system for small devices, built by
co-designing the model and the hardware. It runs a distilled 600M-parameter
NLLB-200 encoder-decoder at sub-byte precision (4-bit integers or 4-bit
floats), which shrinks the model about fourfold. This repository holds a
synthesizable SystemVerilog implementation of its accelerator, the NLP
engine (NLPE). The engine has two compute parts:

* a **systolic matrix engine**. Each processing element is a SIMD
  multiply-accumulate unit. In one cycle it multiplies six INT4 pairs, six
  FP4 pairs, three FP8 pairs or one BF16 pair, and adds them into a running
  dot product;
* a **vector array of activation units (FASST)**. They compute ReLU,
  sigmoid, tanh, exp, softmax, swish and GeLU on FP8 or BF16 data. Apart
  from two small multiplies, they use only shift-add CORDIC iterations.

The main idea is that one 24-bit operand word serves every precision. The
multiplier array is built from 4-bit blocks that tile into any of the four
formats, so lowering the precision adds parallelism instead of leaving
hardware idle.

The RMMEC blocks, the five-stage MAC, the array with its buffers, the FASST
unit and the vector array are described by the published design at block
level. The instruction set, word layouts, buffer sizes and most timing
details are this implementation's own; they are listed under "Where this
RTL departs from the published design".

## Data path

```
 off-chip ──AXI──► mem_ctrl ──► input buffer ──REORDER──► mme (WT / IN banks,
 memory                 ▲        (256 x 24b)               ROWS x COLS npe grid)
                        │                                        │ MATMUL
                        │                                   quantizer (opt.)
                        │                                        ▼
                        ├───────────── STORE ◄──────── shared buffer (256 x 16b)
                        │                                        │ NAF
                        │                                        ▼
                        └───────────── STORE ◄──── nmv: LANES x fasst ──► NMV buffer
```

`nlpe_top` is the control unit. It accepts one 32-bit instruction at a
time (`instr_valid` / `instr_ready`) and runs it to completion. `idle`
shows that nothing is in flight.

Instruction word: `{op[31:28], f1[27:24], f2[23:16], a[15:8], b[7:0]}`.

| op | name    | effect |
|----|---------|--------|
| 1  | LOAD    | `b` words from off-chip word `base+f2` into the input buffer at `a` |
| 2  | REORDER | `b` input-buffer words from `a` into the WT bank set (`f1[0]=0`) or the IN bank set (`f1[0]=1`); element *i* goes to bank *i* mod ROWS (or COLS), address *i* / ROWS |
| 3  | MATMUL  | C = A·Bᵀ with inner length K = `b` operand words in mode `f1[1:0]` (0 INT4, 1 FP4, 2 FP8, 3 BF16). The ROWS·COLS results, row-major, go to the shared buffer from `f2`. If `f1[2]` is set they are quantised first: FP8 if `f1[3]`, else INT8 after an arithmetic right shift by `a[3:0]` |
| 4  | NAF     | activation `f1[2:0]` (0 ReLU, 1 sigmoid, 2 tanh, 3 exp, 4 softmax, 6 swish, 7 GeLU) in precision `f2[0]` (0 = two FP8 per word, 1 = BF16) on `b` shared-buffer words from `a`; results go to the NMV buffer from 0 |
| 5  | STORE   | `b` words of the shared buffer (`f1[0]=0`) or the NMV buffer (`f1[0]=1`) from `a` to off-chip word `base+f2` |
| 6  | BASE    | sets the 28-bit off-chip base word address to `instr[27:0]` (1 GiB reachable) |

Off-chip words are 32 bits:

* an operand word holds one 24-bit SIMD vector in its low bits;
* a result word holds one 16-bit value in its low half.

The outputs are:

* `exc`: sticky; set when a matrix result saturated;
* `err`: sticky; set on an AXI error response.

A typical tile is: LOAD A, REORDER to WT, LOAD B, REORDER to IN, MATMUL,
then NAF and STORE. Put the operands in off-chip memory k-major: for each
k, the k-th vector of row 0, then row 1, and so on. REORDER then lands row
*r* in bank *r*.

## The SIMD MAC (`simd_mac`, `rmmec`)

Lane formats within the 24-bit A and B:

| mode | lanes | format | result |
|------|-------|--------|--------|
| INT4 | 6 × `[4i+3:4i]` | two's complement | INT16 |
| FP4  | 6 × `[4i+3:4i]` | E2M1, bias 1 | FP8 E4M3 in `out[7:0]` |
| FP8  | 3 × `[8i+7:8i]` | E4M3, bias 7 | BF16 |
| BF16 | 1 × `[15:0]`    | bias 127 | BF16 |

**Multiplier array.** The core is six `rmmec` blocks, each a 4×4 unsigned
multiplier.

* The six 4-bit lanes use one block each.
* FP8 mantissas, 1+3 bits, fit one block per lane.
* The 8-bit BF16 mantissa product uses four blocks as nibble slices:
  hi·hi<<8 + (hi·lo + lo·hi)<<4 + lo·lo.

The block's second mode, exponent comparison, is built and tested, but the
MAC does not use it. The MAC uses a separate comparator.

**Five stages.** There is one operand pair per cycle, and a result comes
out 5 cycles after the pair marked `last`.

1. *Decode*: sign, exponent and mantissa of every lane and of the addend C.
   The hidden bit is restored and subnormals are read correctly.
2. *Multiply and compare*: nibble products, and the largest product
   exponent (including C on the first beat).
3. *Align and add*: each product, with 8 guard bits, is shifted right by
   its distance to the maximum exponent. All terms then go through one
   signed adder.
4. *Quire*: the block sum is aligned against the running accumulator and
   added. When the sum nears the top of the 48-bit register, it is shifted
   down one place and its exponent raised ("recalibration"). A beat with
   `first` restarts the quire from C; a beat with `last` releases it.
5. *Normalise*: leading-one detection and mantissa truncation, then
   packing into the result format. Overflow saturates to the largest
   finite value and raises `exc`. Results below the smallest normal number
   flush to zero. The largest finite value is ±448 for E4M3 and ±32767
   for INT16.

**Precision.** Truncation happens at two points: in the alignment (bits
below the guard bits) and in the output rounding. Integer results are
exact as long as they fit 16 bits. Floating-point results are within one
unit in the last place of the output format, plus the alignment loss.

## The matrix engine (`mme`, `npe`)

The array is output-stationary: each `npe` keeps its own C[r][c] in its
MAC.

* Weight vectors (A rows) enter at the left and move one PE right per
  cycle, carrying valid/first/last with them.
* Embedding vectors (B rows) enter at the top and move one PE down per
  cycle.

WT has one bank per row and IN one bank per column. On a run, the FSM reads
address k = 0…K−1 from all banks at once. Row *r* and column *c* are delayed
by *r* and *c* cycles, so that A[r][k] and B[c][k] meet in PE (r,c). The
run ends when the bottom-right PE holds its result. From `start` to `done`
takes **K + ROWS + COLS + 6 cycles**. The control unit then copies the
ROWS·COLS results into the shared buffer, one per cycle, through the
combinational `quantizer`.

At the default 16×16 array and 250 MHz, the peak rate is:

* INT4/FP4: 256 × 6 × 2 ops × 250 MHz = 768 GOPS;
* FP8: 384 GOPS;
* BF16: 128 GOPS.

The published engine reaches 684.48 GOPS. It does not state its array
size; 16×16 is the smallest square array that reaches that figure.

## The activation unit (`fasst`)

The input is a 16-bit word: one BF16 value, or two FP8 values handled one
after the other. Each value becomes signed fixed point with 16 fraction
bits, clamped to |x| < 8.

**Exponential.** t = x·log₂e is split into an integer *k* and a fraction
*f*. e^(f·ln2) comes from 16 hyperbolic CORDIC rotations:

* i = 1…14, with 4 and 13 repeated for convergence;
* start from x = 1/K, y = 0, z = f·ln2;
* the result is x + y.

The result is then shifted by *k*.

**Division.** N/D uses 17 linear CORDIC vectoring steps, which is
non-restoring division with quotient digits ±1.

A small amount of routing logic builds each function from these two
engines and two adders:

| function | computation | cycles (BF16) |
|----------|-------------|---------------|
| ReLU     | max(x,0), no CORDIC | 3 |
| exp      | e^x | 21 |
| sigmoid  | 1/(1+e^−x) | 38 |
| tanh     | sgn(x)·(1−e^−2\|x\|)/(1+e^−2\|x\|) | 38 |
| softmax pass 1 | e^x stored in C[n], sum += e^x | 21 |
| softmax pass 2 | C[i]/sum | 20 |
| swish    | x·sigmoid(x): the sigmoid path, then one multiply | 38 |
| GeLU     | x·sigmoid(1.702x), a common sigmoid approximation | 38 |

An FP8 word takes 2L−1 cycles. The result is converted back by leading-one
detection and truncation. Accuracy against exact math is about 2⁻⁶
relative for BF16, and one E4M3 step for FP8. The softmax buffer holds 16
values (`SMAX_N`).

## The vector array (`nmv`)

The array has `LANES` FASST units (4 by default). The control unit:

* reads the words to process from the shared buffer;
* hands each word to the first free lane's input register;
* lets the lanes run independently (MIMD), so up to LANES operations
  overlap;
* writes finished results into the NMV buffer at their own index, one per
  cycle, lowest lane first. Results can finish out of order but land in
  order.

Softmax needs all values in one softmax buffer, so it runs on lane 0 alone.
The buffer is cleared, every word is sent once to accumulate e^x and the
sum, and then every index is normalised.

## Memory control (`mem_ctrl`)

This is an AXI4 master for both directions.

* Each word is a single-beat transaction: length 0, full 32-bit size,
  INCR burst.
* Only one transaction is outstanding at a time.
* Reads stream into the input buffer at `a + position`.
* Writes fetch word *i* from the selected buffer one cycle before sending
  it.
* Assertions check that valid is held, with stable payload, until ready.

## Parameters

| module | parameter | default | meaning |
|--------|-----------|---------|---------|
| nlpe_top | ROWS, COLS | 16, 16 | systolic array size |
| nlpe_top | LANES | 4 | FASST lanes in the vector array |
| nlpe_top | MME_DEPTH | 64 | words per WT/IN bank (max K) |
| nlpe_top | IB_DEPTH, SH_DEPTH | 256, 256 | input buffer; shared and NMV buffers |
| simd_mac | GUARD | 8 | alignment guard bits |
| fasst | SMAX_N | 16 | softmax buffer entries |

All of these are this implementation's choices; the published design
gives no sizes.

## Where this RTL departs from the published design

* **No overlap between units.** The published engine pipelines its units
  so that computation overlaps data movement, and issues parallel
  load/store vector instructions. Here one instruction runs at a time, and
  memory traffic is one 32-bit AXI beat per transaction. The compute
  arithmetic is unaffected. Off-chip bandwidth is far below what a
  66 tokens/s translation rate needs: about 37 GB/s if the weights are
  re-read per token, against well under 1 GB/s here.
* **FP8 activations are computed one after the other** inside a FASST
  unit, not two at once. The parallelism comes from the lanes of the
  vector array.
* **Swish and GeLU use chosen formulas; SELU is not built.** The
  published unit is said to derive these from the same CORDIC hardware, but
  gives no formulation. Here swish is x·sigmoid(x), and GeLU is the sigmoid
  approximation x·sigmoid(1.702x). The 3-bit function code has no value left
  for SELU.
* **Parts of the vector array are missing.** Per-lane weight registers,
  tile-reuse control, scalar compute and the reduce/ALU/shift-multiply
  block appear in the block diagram without a description, and are not
  built.
* **No accumulation across passes.** One MATMUL covers K ≤ 64 operand
  words. The input buffer limits K further: to 16 words when A and B are
  loaded in separate rounds. Longer reductions, such as a 1024-wide FFN
  row, must be split, with the partial sums added outside the engine.
* **Exponent comparison in the MAC.** The RMMEC compare mode exists, but
  the MAC compares exponents with a separate comparator.
* **Own encodings.** The output formats per mode (FP4→E4M3, FP8→BF16), the
  16-bit addend, truncation instead of rounding, and flush-to-zero are this
  implementation's choices.

## Verification

Each module has a self-checking testbench in `tb/`. Each computes expected
values independently, using `real` arithmetic or exhaustive tables. Each
also checks the cycle counts given above, and stops itself with a
watchdog. A run ends with `TB_RESULT checks=N failures=M`.

| testbench | what it covers |
|-----------|----------------|
| tb_rmmec | exhaustive, both modes |
| tb_simd_mac | 3000 random dot products in all modes, latency, saturation |
| tb_npe | one PE: INT4 dot products, operand forwarding, 6-cycle result latch |
| tb_mme | a 3×4 array in INT4, plus an exact BF16 run |
| tb_quantizer | BF16→E4M3 over every sign and exponent, INT8 shift-and-saturate on random inputs |
| tb_fasst | every function and precision, against `$exp` |
| tb_nmv | every function in both precisions, softmax, lane parallelism |
| tb_mem_ctrl | against a randomly stalling AXI memory (`axi_mem_model`) |
| tb_sram_buf | the buffer memory |
| tb_nlpe_top | the whole engine at 3×4 with 2 lanes |
| tb_nlpe_full | the whole engine at the default size, no parameter overrides |

The two engine tests follow the same scheme. They run INT4, FP4, FP8 and
BF16 matrix products, both quantisers, every activation in both
precisions, saturation, and AXI back-pressure. Softmax is covered only at
the reduced size, because 16 values fit its buffer. Each mechanism is
counted, and one that never occurred counts as a failure. The full-size
test takes under a minute.

To simulate with plain Verilator 5, list the package first:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/nlpe_pkg.sv rtl/rmmec.sv rtl/simd_mac.sv rtl/npe.sv rtl/sram_buf.sv \
  rtl/mme.sv rtl/quantizer.sv rtl/fasst.sv rtl/nmv.sv rtl/mem_ctrl.sv \
  rtl/nlpe_top.sv tb/axi_mem_model.sv tb/tb_nlpe_full.sv \
  --top-module tb_nlpe_full -o sim && ./obj_dir/sim
```

For a single block, pass the package, the block and its submodules, and
its testbench.
