# MIVE — a minimalist integer vector engine for Softmax, LayerNorm and RMSNorm

Transformer inference spends most of its arithmetic on matrix products, but
the three normalisations around them (Softmax, LayerNorm and RMSNorm) are
awkward for hardware. Each one needs a reduction over a whole vector (a
maximum, a mean, a sum of squares or of exponentials). Each one also needs
an element-wise non-linear step (e^x, 1/S or 1/√S). Accelerators usually
build a separate unit for each function.

MIVE builds one small unit for all three. Every step of the three algorithms
is one of two primitives:

* **muladd**: `y = A·B ± C`. Addition, subtraction, squaring, scaling and a
  piecewise-linear (PWL) function evaluation are all this one operation with
  different operands.
* **vecsum**: a reduction tree over one sub-vector that gives either the sum
  or the maximum.

A long vector of N INT8 elements is processed as ⌈N/L⌉ sub-vectors of L
lanes (L = 8). The normalisation constant depends on the whole vector, so
each function makes two passes. The first pass accumulates the statistics.
The second pass normalises. Softmax and LayerNorm keep a running maximum and
a running mean. When the running value moves, the partial sum already
accumulated is corrected on the fly, so nothing has to be recomputed.

This repository holds synthesizable SystemVerilog RTL for the engine and
self-checking testbenches for every block and for the whole engine. It
follows the published architecture. Everything the architecture description
leaves open was chosen here: number formats, PWL tables, instruction
encoding and the external interface. Those choices are marked below.

## Datapath

```
                    instr (one word per cycle, fields drive selects directly)
   ┌──────────────────────────────┬───────────────────────┬──────────────────┐
   │                              │                       │                  │
 ┌─▼──────────────┐         ┌─────▼─────┐        ┌────────▼─────────┐  ┌─────▼──────┐
 │ scalar muladd  │         │  vecsum   │        │ L × vector muladd │  │  buffer    │
 │ (all 4 PWLs)   │◄─M_old  │ sum / max │◄─X     │  (e^x PWL each)   │◄─X  ROWS × L │
 └──┬─────────────┘  M_new  └─────┬─────┘  M_old └────────┬─────────┘  │  INT8      │
    │  S_old, S_new               │                       │            │  queue     │
    ▼                             ▼                       ▼            └──┬──────▲──┘
 M_old ◄ {muladd, M_new}    M_new ◄ {muladd, vecsum}   X ◄ {array, buffer head}   │
 S_old ◄ muladd             S_new ◄ {muladd, vecsum}   X ──────────────────────────┘ push
```

| Block | Module | What it does |
|---|---|---|
| Buffer | `mive_buffer` | `ROWS`×`L` INT8 elements, used as a circular queue. *pop* takes the head row. *push* appends either X, saturated to INT8, or a row from outside. |
| Vector register | `mive_xreg` | Holds L 32-bit lanes. It loads either the buffer head (sign-extended) or the result of the array. |
| Vector muladd array | `mive_vec_array` | L `mive_muladd` lanes. A is the lane of X. B is X, a broadcast scalar register, the immediate or the external vector `pvec_b`. C is 0, the scalar, the immediate or `pvec_c`. |
| vecsum | `mive_vecsum` | A tree of L−1 add/subtract nodes. In max mode each node subtracts and lets the sign pick the larger input. One extra node can compare the result with M_old. |
| Scalar unit | `mive_scalar_unit` | One `mive_muladd` with all four PWL functions. Its operands come from M_old, M_new, S_old, S_new, the immediate or 0. The registers and their input multiplexers match the published block diagram. |
| muladd | `mive_muladd` | `y = ((A·B) >>> shamt) ± C`. It subtracts by complementing C. In PWL mode its ROM supplies A, B, C and `shamt`. |
| PWL ROM | `mive_pwl_rom` | Selects the segment of the argument and returns the segment's coefficients. |
| Engine | `mive_top` | Connects the blocks above. |
| Types | `mive_pkg` | Instruction word, operand encodings, word widths, exponential table. |

Every instruction finishes in one clock cycle. Operands are read from the
current register contents, and every destination is written at the next
rising edge. A vector instruction therefore processes L elements per cycle.
At 2 GHz that is 16 G element-operations/s for L = 8, the throughput
definition used for the published comparison (L × f). The RTL is purely
single-cycle and has not been timed against any clock target.

## The instruction word

There is no decoder. Each field of `instr_t` (`mive_pkg.sv`) drives a
multiplexer select or write enable directly, and all fields act in the same
cycle. One instruction can therefore reduce X into S_new while the scalar
unit updates S_old.

| Field | Meaning |
|---|---|
| `s.a`, `s.b`, `s.c` | Scalar muladd operands: `SOP_MOLD/MNEW/SOLD/SNEW/IMM/ZERO`. |
| `s.sub`, `s.shamt` | Subtract C; arithmetic right shift applied to the 64-bit product. |
| `s.pwl`, `s.fn` | Evaluate PWL function `fn` of operand A. B, C and `shamt` are then taken from the ROM. |
| `r.*_we`, `r.mold_from_mnew`, `r.mnew_from_vs`, `r.snew_from_vs` | Register write enables and their input selects (muladd, M_new or vecsum). |
| `vs.max`, `vs.with_mold` | vecsum mode: sum or max; in max mode, include M_old. |
| `v.b`, `v.c`, `v.sc`, `v.sub`, `v.shamt`, `v.pwl` | Vector array: B and C sources, which scalar is broadcast, subtract, shift, exponential PWL. |
| `mv.x_we`, `mv.x_from_buf` | Write X, from the array or from the buffer head. |
| `mv.pop`, `mv.push`, `mv.push_ext` | Buffer queue operations. |
| `imm` | 32-bit immediate: constants, loop index i, √N. |

The engine has no sequencer of its own. An external host (in the
testbench, the testbench itself) issues the loops below one instruction at a
time. `instr_valid` qualifies every state change. There is no back-pressure:
the host must not pop an empty buffer or push into a full one.
`mive_buffer` asserts both rules.

## Number formats and the PWL functions

This is the part that needs the most care when reusing the design. Inputs
and outputs are INT8. Every X lane and scalar register is a 32-bit signed
integer, and the program decides where the binary point sits. Products are
formed at 64 bits and scaled back by the instruction's shift. Sums wrap
modulo 2^32, and the formats below are chosen so that the evaluated sizes
never wrap. Saturation to INT8 happens only when X is pushed into the
buffer.

**Piecewise-linear evaluation in one multiply-add.** The ROM returns, for an
argument x, the intercept `b` at the start of x's segment, the rise `a` of
the function over the segment, the offset `off` of x within the segment and
the segment width 2^shamt. The muladd then computes

    y = b + ((a · off) >>> shamt)

The segments are aligned to powers of two, so `off` is simply the low bits
of x and no subtractor is needed in front of the multiplier.

| Function | Argument | Result | Segments |
|---|---|---|---|
| `FN_EXP` | x ≤ 0 in Q4 (x/16) | 2^15·e^(x/16) (Q15) | 16 uniform segments of width 0.5 over [−8, 0]; 0 below −8. End points `EXP_TAB[k] = round(2^15·e^(−k/2))`. |
| `FN_RECIP` | S ≥ 1 | 2^37 / S | 8 per octave (index = MSB position and the next 3 bits); S ≤ 7 exact. |
| `FN_RSQRT` | S ≥ 1 | 2^30 / √S | same octave segmentation |
| `FN_LNC` | i ≥ 1 | 2^15·(i−1)/i | same octave segmentation |

The octave tables are not listed anywhere. They are computed at elaboration
time by a constant function in `mive_pwl_rom.sv`, which evaluates each
function at the segment end points with 64-bit integer arithmetic (an
integer square root for 1/√S), rounds them and saturates them at 2^31−1.
The vector lanes instantiate the ROM with `SCALAR_FNS = 0` and hold only
the exponential. Measured accuracy against the exact functions: the
exponential is within 3.2 % of full scale, and 1/S and 1/√S are within
0.5 %.

**Formats used by the programs** (chosen so that nothing overflows up to
N = 8192):

| Quantity | Format |
|---|---|
| Softmax input | INT8 logits in Q4 (real value = x/16) |
| x − max, e^(x−max) | Q4 argument, Q15 result |
| Softmax output | probability in Q7 (1.0 saturates to 127) |
| Sub-vector mean | vecsum sum = mean in Q3 (L = 8), multiplied by 256 to Q11 |
| Squared deviation | ((2048·x − μ)²) >>> 22 → integer units |
| 1/σ | 2^30/√S multiplied by round(√N·256) then >>> 22 → Q16 |
| Normalised value | Q8 |
| γ, β | γ as an integer in Q6 of the output scale, β in output LSBs, given per lane on `pvec_b`/`pvec_c` |

The running mean is kept in Q11 rather than Q3. With Q3, the truncation
in the (i−1)/i correction biases the mean by about half an LSB per
sub-vector, and over 896 sub-vectors (N = 7168) that drifts by several
units.

## The three programs

All three functions use i = 1 … R, where R = N/L. The right-hand column is
the instruction count, which is also the cycle count.

**LayerNorm**, 22R + 4 cycles (19 716 for N = 7168):

```
S_old ← 0; M_old ← 0
pass 1, per i:  pop → X;  M_new ← sum(X) (mean, Q3);  M_new ← 256·M_new (Q11);  push X
                X ← 2048·X − M_new;  X ← X² >>> 22;  S_new ← sum(X)
                correction (parallel-variance update):
                  S_old ← S_old + S_new
                  S_new ← PWL (i−1)/i            M_old ← M_old − M_new      (Δμ)
                  S_new ← (M_old·S_new) >>> 15   M_new ← M_new + S_new      (μ_i)
                  M_old ← (M_old·M_old) >>> 16   S_new ← PWL (i−1)/i
                  M_old ← (S_new·M_old) >>> 18   (·L folded into the shift)
                  S_old ← M_old + S_old;         M_old ← M_new
S_old ← PWL 1/√S_old;  S_old ← (S_old·round(√N·256)) >>> 22
pass 2, per i:  pop → X;  X ← 2048·X − M_old;  X ← (X·S_old) >>> 19
                X ← (γ·X) >>> 14 + β;  push X
```

The correction is the parallel-variance update. For the first i−1
sub-vectors with sum of squared deviations Sum_(i−1) and mean μ_(i−1), and
the current sub-vector with mean μ_x, let Δμ = μ_(i−1) − μ_x. Then:

* Sum_i = Sum_(i−1) + Σ(x − μ_x)² + L·(i−1)/i·Δμ²
* μ_i = μ_x + (i−1)/i·Δμ

**RMSNorm**, 9R + 3 cycles:

```
S_old ← 0
pass 1:  pop → X;  push X;  X ← X·X;  S_new ← sum(X);  S_old ← S_old + S_new
S_old ← PWL 1/√S_old;  S_old ← (S_old·round(√N·256)) >>> 22
pass 2:  pop → X;  X ← (X·S_old) >>> 8;  X ← (γ·X) >>> 14;  push X
```

**Softmax**, 15R + 3 cycles:

```
S_old ← 0; M_old ← −128
pass 1:  pop → X;  M_new ← max(X, M_old);  push X;  X ← X − M_new;  X ← PWL e^X
         S_new ← sum(X)
         correction:  M_old ← M_old − M_new;  M_old ← PWL e^M_old
                      S_old ← (S_old·M_old) >>> 15 + S_new;  M_old ← M_new
S_old ← PWL 1/S_old   (2^37/S)
pass 2:  pop → X;  X ← X − M_old;  X ← PWL e^X;  X ← (X·S_old) >>> 30;  push X
```

Pass 1 pushes every popped row back onto the buffer queue, so the vector is
in order again for pass 2. After pass 2, the host pops the R result rows
(`out_row` with `out_valid`). The buffer then holds nothing.

## Departures from the published description

* **Broadcast scalar.** The published block diagram shows only S_old
  feeding the vector muladd lanes. The published algorithms also subtract
  M_new and M_old from X, so here the instruction selects which of the four
  scalar registers is broadcast.
* **Line 8 of the LayerNorm correction.** As published, line 8 reads
  "M_old ← S_new·L", which discards the Δμ² computed on the line before.
  This design computes M_old ← S_new·M_old and folds the factor L, a power
  of two, into the shift. This is what the update equation requires.
* **Scaling 1/√S.** The published algorithms scale 1/√S by N⁻¹. Since
  1/σ = √N/√S, this design multiplies by round(√N·256) from the immediate.
* **Correction factor.** The correction factor is written (1−j)/j in one
  place and (i−1)/i in another. This design uses (i−1)/i.
* **Mean.** The sub-vector mean is the vecsum sum read with log2(L)
  fractional bits, not a division.
* **Extra LayerNorm instruction.** The LayerNorm program has one
  instruction the published algorithm does not list: M_new ← 256·M_new
  right after the mean. It moves the mean from Q3 to Q11.
* **Chosen here, not published:**
  * γ and β enter on two per-lane operand ports.
  * The loop index i and the constants enter through the instruction
    immediate.
  * ε is omitted, as the published algorithms also omit it.
  * The buffer is a queue of 1024 rows.
  * The number formats and PWL tables above.
  * Everything is single-cycle and has no pipeline registers.
  * Registers reset to zero.
* **Not attempted.** Published area, power and 2 GHz timing figures come
  from a 28 nm physical implementation. This RTL has not been
  characterised for them.

## Verification

Each block has a testbench in `tb/`. Each one checks against values it
computes independently, prints `TB_RESULT checks=N failures=M` and has a
cycle watchdog.

| Testbench | What it covers |
|---|---|
| `tb_mive_pwl_rom` | Every exponential argument, plus random and corner arguments of the octave functions. The chord is recomputed with `$exp`/`$sqrt` and checked against the exact functions. |
| `tb_mive_muladd` | Random and extreme operands, all shifts, add and subtract; PWL accuracy. |
| `tb_mive_vecsum` | Sum and max, with and without M_old, extreme values, L = 8 and L = 4. |
| `tb_mive_vec_array` | Every operand-source combination, and the exponential on all lanes. |
| `tb_mive_scalar_unit` | Random instructions against a register model; the Softmax correction against real arithmetic. |
| `tb_mive_xreg` | Loads, hold and sign extension. |
| `tb_mive_buffer` | Random queue traffic with wrap-around, saturation and completely full. |
| `tb_mive_top` | The whole engine at the default parameters. It runs LayerNorm for N = 16, 256 and 7168, RMSNorm for 64 and 4096, and Softmax for 64, 2048 and 4096. |

`tb_mive_top` checks each output element in two ways:

* bit-exactly against an integer model of the program written in the
  testbench;
* against the real-valued function, within 3 output LSBs for the two norms
  and 2 LSBs for Softmax.

It also checks the first-pass statistics (running mean, sums, maximum), and
it counts that running-maximum updates, non-zero mean corrections,
exponential underflow, INT8 saturation and buffer wrap-around all occur.
The largest sizes are the hidden sizes and context lengths of OPT-30B
(LayerNorm and Softmax) and Llama2-7B (RMSNorm and Softmax).

To simulate with Verilator 5 (the package first):

```
verilator --binary --timing --assert rtl/mive_pkg.sv rtl/mive_*.sv tb/tb_mive_top.sv \
          --top-module tb_mive_top -o sim && obj_dir/sim
```

Replace `tb_mive_top` with any other testbench name to run that block's test.

## Changing the design

* **`L`** (lanes) and **`ROWS`** (buffer depth) are parameters of
  `mive_top`. L must be a power of two. The programs above assume L = 8 in
  their shift amounts: the Q3 mean and the `>>> 18` with L folded into it.
* **Word widths** (`DW`, `EW`), the exponential table and the PWL
  segmentation (`SB` in `mive_pwl_rom`) live in `mive_pkg` and
  `mive_pwl_rom`.
* **Instruction fields** are one packed struct. Adding a source to a
  multiplexer means widening its enum in `mive_pkg` and adding the case in
  the corresponding module.
