# HFRWKV: an on-chip RWKV inference datapath in SystemVerilog

RWKV is a recurrent neural network for text generation. Each token runs through a fixed sequence
of matrix-vector products, element-wise mixes with the previous token,
exponentials, a division (the WKV average), sigmoids and LayerNorms, and no
attention matrix grows with the context. One token is almost pure
matrix-vector work, so the cost is set by how fast the weights reach the
multipliers. HFRWKV is an FPGA accelerator (Alveo U50/U280) built on three
ideas:

* **Multiplier-free 9-bit weights.** Every weight that multiplies an
  activation is stored in a 9-bit *Delta-PoT* code: a sign and up to three
  powers of two, each given as a shift relative to the previous one. One
  product is then three barrel shifts and two additions, with no DSP
  multiplier. Weights that are only added to activations use plain 9-bit
  uniform codes. All activations are 9-bit fixed point.
* **Everything except the large matrices stays on chip.** Vector weights and
  the recurrent state sit in block RAM. Activations sit in a buffer next to
  the compute units. Matrix weights stream from HBM into two URAM banks used
  as a ping-pong pair, so the next chunk of a matrix loads while the array
  works on the current one.
* **Dedicated units for the non-linear parts.** A shared exponential/sigmoid
  unit uses shift-add constants and small tables. A table-based divider uses
  a leading-one detector. A single-pass LayerNorm unit uses adder trees.

This repository implements that accelerator in its main configuration: the
U50 build for the 430M-7B models, with a 512-lane array, a 512-wide
LayerNorm tree and 128 division and 128 exponential/sigmoid units. It
follows the architecture paper "HFRWKV: A High-Performance Fully On-Chip
Hardware Accelerator for RWKV". Where the paper describes a unit's insides
(Delta-PoT multiplier, PMAC pipeline, leading-one detector, divider,
exponential/sigmoid, adder-tree accumulator, LayerNorm structure), the RTL
follows it. Where the paper only names a block (controller, memory bridge,
buffers), the RTL is the simplest design that does the job. The section
"Departures from the paper" lists every choice of that kind that matters.

## Number formats

| Quantity | Format | Origin |
|---|---|---|
| activation (`act_t`) | 9-bit two's complement, Q4.4, range ±255/16, symmetric | width from the paper, binary point chosen here |
| multiplier weight (`wgt_t`) | 9-bit Delta-PoT code, see below | paper |
| additive weight | 9-bit two's complement, same scale as the activation | paper (uniform symmetric), scale chosen here |
| PMAC accumulator | 16-bit signed, saturating | paper (width) |
| divider / exp / sigmoid inside | 16-bit, Q8.8 | paper (width), binary point chosen here |
| LayerNorm input | 16-bit signed, 4 fractional bits | chosen here |

Results that go back to the activation buffer are saturated to ±255
(`sat_act`). Every per-tensor scale factor γ of the quantiser stays outside
the accelerator. The hardware computes with the codes alone.

## The Delta-PoT multiplier (`dpot_mult`)

The weight code, with the bit positions as the paper draws them:

```
 8     7 6    5    4 3    2    1 0
 s  |  dq0 | v1 | dq1 | v2 | dq2
```

It stands for

```
w = (-1)^s * 2 * (p0 + v1*p1 + v2*p2)
p0 = 2^-dq0            (dq0 = 0 means w = 0)
p1 = p0 * 2^-dq1
p2 = p1 * 2^-dq2
```

Each term is a further right shift of the previous one, so the three shifters
form a chain. The multiplier works in these steps:

1. Take |x| and widen it by enough fraction bits that nothing shifted out is
   lost.
2. Shift it by dq0, then by dq1, then by dq2.
3. Pass the second and third terms, or zero, according to v1 and v2.
4. Add the three terms and double the sum.
5. Truncate toward zero, saturate to ±255 and put the sign back.

Example: the code `0_01_1_01_1_10` is 2·(1/2 + 1/4 + 1/32) = 1.5625. With
x = −64 the product is −100.

The paper's figure prints the shifts as "<<". Its defining equation
(p_i = p_{i−1}·2^−Δq) makes them divisions, and the RTL follows the
equation.

## Matrix-Vector Processing Array (`mvpa`, `pmac`)

The array has `LANES` PMAC lanes. Each lane has three pipeline stages:
operand register, Delta-PoT product, 16-bit accumulator. An addition array
sits beside the lanes, delayed to the same latency. One beat enters per
cycle. The array has three modes:

* **MV** (accumulators on). One vector element is broadcast to all lanes
  with one matrix column of `LANES` weights. After `l` beats, lane *i* holds
  row *i*'s dot product. The array reads the matrix column by column, so
  each vector element is used once per chunk of 512 rows.
* **EW** (accumulators off). Lane *i* multiplies activation *i* by Delta-PoT
  weight *i*. Every beat yields a row. This mode covers the token-shift
  mixes μ⊙x and the LayerNorm scale.
* **ADD.** Lane *i* adds activation *i* and a 9-bit operand, which is either
  a uniform additive weight from the vector BRAM or another activation row.
  The sum saturates.

A result row leaves the array 4 cycles after its last beat. A chunk of `l`
columns therefore takes `l+4` cycles, and an element-wise pass over `n` rows
takes `n+4` cycles. These are the latencies the paper states.

## Complex computing units (`ccu`, `divu`, `lod`, `exp_sigmoid`)

The `ccu` has `NCU` = 128 dividers and 128 exponential/sigmoid units. A
512-wide row is fed to them in four slices of 128, one slice per cycle.
Activations are widened from Q4.4 to Q8.8. Division separates the signs,
divides the magnitudes and sets the sign of the quotient to the XOR of the
two signs. Results are truncated back to Q4.4 with saturation.

**Divider** (3 stages):

1. A 16-bit leading-one detector normalises each operand to 2^k·(1.f). The
   detector is a log2(K)-step binary search that keeps the upper half of
   the window if it holds a one.
2. The four bits after each leading one address a 16×16 table of quotients
   of mantissas. Entry (i, j) is round(128·(16+i)/(16+j)).
3. The table value is shifted by k1 − k2.

The quotient is accurate to a few per cent, set by the 4-bit mantissas. A
zero divisor returns all ones.

**Exponential/sigmoid** (2 stages): one shift-add unit serves both
functions.

* `exp(x)` computes `Y = x·log2(e)` with log2(e) ≈ 1.0111b: x + x/2 − x/16,
  one addition, one subtraction and two shifts. The 8 fraction bits of Y
  index a 256-entry table of 2^(v/256). The integer part of Y shifts the
  result. The table is computed at elaboration by repeated multiplication
  with round(2^30·2^(1/256)), so the RTL reads no data file.
* `sigmoid(x)` is piecewise linear in |x|. Each segment is a right shift
  plus an intercept, and f(−x) = 1 − f(x):

  | segment | f(x) |
  |---|---|
  | 0 ≤ x < 1 | x/4 + 0.5 |
  | 1 ≤ x < 2.375 | x/8 + 0.625 |
  | 2.375 ≤ x < 5 | x/32 + 0.84375 |
  | x ≥ 5 | 1 |

The 1.0111b constant is about 0.36 % short of log2(e). The relative error of
exp therefore grows with |x|, by about 0.36 % per unit of x, so it is about
3 % at x = 8 before table and rounding errors.
Recurrences that run many exponentials in a row should keep this in mind.

## LayerNorm (`layernorm`, `atac`, `sub_sqrt`)

A vector of d = B·P values (P = 512, up to `MAX_BLK` = 8 blocks) streams in
one block per cycle. The unit computes mean and variance in a single pass,
using E[x²] − μ² instead of a second pass over the data:

* **Delay unit.** A FIFO holds the blocks until the statistics exist.
* **Mean unit.** An ATAC sums x. An ATAC is a pipelined 512-input adder tree
  followed by an accumulator across blocks. The result is valid B + 9
  cycles after the first block. Division by d is a right shift by 9 plus a
  shift-add multiplication by ceil(65536/B). This keeps d = 2560 (B = 5)
  exact to a fraction of an LSB without a divider.
* **Std unit.** Squarers feed a second ATAC. E[x²] − μ² + ε goes into an
  unrolled restoring square root.
* **Normalisation.** Once σ is known, the FIFO drains one block per cycle.
  Each lane divides |x − μ| by σ in its own divider (the same `divu`) and
  restores the sign.

The learned scale and bias are not part of this unit. The program applies
them with an EW and an ADD command. The paper does not say where they are
applied.

## Memories and double buffering

| Block | Contents | Default size |
|---|---|---|
| `weight_buffer` | two banks of 4096 words, each word 512 Delta-PoT codes (one column slice of a 512-row chunk) | 2·4096·512·9 bit = 37.7 Mbit = 128 URAM |
| `vector_bram` | vector weights and recurrent state, one row = 512 values | 4096 rows = 18.9 Mbit = 512 BRAM36 |
| `act_buffer` | activations and intermediates; read ports a, b and a host read port | 256 rows |
| external memory | HBM, one 4608-bit word per cycle (lane *i* in bits 9i+8..9i) | 4608 bit × 350 MHz = 201.6 GB/s |

Each weight bank has a *full* flag. The memory bridge sets it when a load
into that bank completes. The controller clears it once an MV command has
used the bank. A load into a full bank waits. An MV on a bank that is not
yet full stalls. With this handshake, chunk k+1 of a large matrix, such as
the eight 512-row chunks of a 4096×4096 matrix, loads while chunk k is
multiplied. The paper gives no buffer sizes. The ones here are chosen to
fill the 128 URAMs and fit within the 637 BRAMs that the paper reports for
this build.

## Command interface (`controller`, `hfrwkv_top`)

The host sends `cmd_t` commands with a valid/ready handshake. The
controller runs one command at a time. A row is 512 values, and every
address below is a row index.

| op | effect |
|---|---|
| `LOADW` | `len` external words from `ext_addr` into weight bank `bank`. Returns at once, so the load runs under the following commands. |
| `LOADV` | `len` external words into vector-BRAM rows starting at `dst`. Waits until done. |
| `MV` | For each of `len_out` chunks r: act[dst+r] = W(bank) · act[src_a .. src_a+len−1], where column n of chunk r is bank word r·N+n and N = 512·len. Releases the bank at the end. |
| `EW` | act[dst+r] = act[src_a+r] ⊙ bram[src_b+r] (Delta-PoT), r < len |
| `ADD` | act[dst+r] = act[src_a+r] + (b_act ? act : bram)[src_b+r] |
| `EXP`, `SIG` | act[dst+r] = f(act[src_a+r]) |
| `DIV` | act[dst+r] = act[src_a+r] / act[src_b+r] |
| `LN` | act[dst..] = LayerNorm(act[src_a .. src_a+len−1]) |
| `SAVE` / `RESTORE` | copy rows activation buffer → BRAM / BRAM → activation buffer (the recurrent state) |

**Timing.** After its bank is full, an MV command takes
`len_out·(N+5)` cycles. Each chunk takes N beats, plus 4 cycles of array
latency, plus one cycle of buffer read. The top has two counters:

* `stall_cycles` counts cycles in which an MV waits for its bank.
* `overlap_cycles` counts cycles in which a weight load runs while the
  controller executes another command.

Together they show how much loading the double buffering hides.

**Mapping one RWKV time-mix step**, as the end-to-end testbench does in
small:

1. `LN` the input.
2. `EW` with μ and `EW` with (1−μ) against the saved x_{t−1}, then `ADD` the
   two.
3. `MV` for r, k and v.
4. `SIG` on r.
5. `EXP` and `ADD` for the WKV terms, then `DIV`.
6. `SAVE` the new state.
7. The output `MV`.

Step 5 also needs the products e^(u+k)·v and r·wkv. These multiply two
activations, which the array cannot do (see below).

## Capacity at the default parameters

The default build holds these RWKV-4 sizes. The model shapes are those of
the public RWKV-4 releases, not taken from the paper, except the 4096×4096
matrix of the 7B model, which the paper names.

| model | d | layers | d×d matrix | d×4d matrix | LN blocks | vector rows needed |
|---|---|---|---|---|---|---|
| 430M | 1024 | 24 | 2048 words, 1 bank | 8192 words, 2 loads | 2 | 768 |
| 1.5B | 2048 | 24 | 8192, 2 loads | 32768, 8 loads | 4 | 1536 |
| 3B | 2560 | 32 | 12800, 4 loads | 51200, 13 loads | 5 | 2560 |
| 7B | 4096 | 32 | 32768, 8 loads | 131072, 32 loads | 8 | 4096 |

The "vector rows needed" column counts about 16 vectors per layer: 11
weight vectors and 5 state vectors. One MV command reads at most 4096 input
columns, so the 4d-wide channel-mix value product of the 1.5B, 3B and 7B
models is split into partial MVs whose 9-bit results are added with `ADD`.

The 169M model (d = 768) does not fit this build. LayerNorm works in whole
512-wide blocks. The paper runs that model on a separate build with
d = 384, which is not included here.

## Departures from the paper and what is missing

* **Products of two activations.** RWKV needs r⊙wkv, e^(u+k)⊙v and the
  squared ReLU of the channel mix. The array multiplies only by Delta-PoT
  weight codes. The paper does not say how it forms activation-by-activation
  products, and no such path is built. A layer therefore cannot be run
  end to end on the accelerator alone.
* **Model-level sequencing is not built.** Only the command primitives are.
  This includes the WKV recurrence over aa, bb and pp, embedding lookup and
  the output head. The host or a command program must do it.
* **Mixed-precision weight decode.** The paper stores weights concatenated
  off chip and decodes them to their bit widths on arrival. Here every
  external field is a fixed 9-bit field.
* **Other builds.** The U50 build for the 169M model (d = 384, 256-wide
  LayerNorm tree) and the two U280 builds are not included. This RTL ties
  the LayerNorm width to the array width.
* **Choices made here**, where the paper gives none:
  * the command set and controller sequencing;
  * the Q4.4 and Q8.8 binary points;
  * the saturation rules;
  * the divider table format;
  * the ε of LayerNorm (one LSB of the variance);
  * the buffer depths and port counts;
  * the slicing of rows into the 128 complex units.
* **Accuracy against floating point** (perplexity) has not been measured.
  The testbenches check the RTL against exact integer references for the
  same arithmetic, and against real-valued functions within the stated
  error bounds of the approximations.

## Files

`rtl/` (one module or package per file):

| File | Contents |
|---|---|
| `hfrwkv_pkg.sv` | formats, enums, `cmd_t` |
| `dpot_mult.sv`, `pmac.sv`, `mvpa.sv` | the matrix-vector array |
| `lod.sv`, `divu.sv`, `exp_sigmoid.sv`, `ccu.sv` | the complex units |
| `atac.sv`, `sub_sqrt.sv`, `layernorm.sv` | LayerNorm |
| `weight_buffer.sv`, `vector_bram.sv`, `act_buffer.sv`, `mem_bridge.sv` | memories and their fill path |
| `controller.sv`, `hfrwkv_top.sv` | sequencing and the top level |

`tb/` holds one self-checking testbench per block, `tb_<module>.sv`, plus:

* `tb_ref_pkg.sv`: independent reference arithmetic.
* `ext_mem_model.sv`: a behavioural HBM read port with latency and random
  back-pressure.
* `tb_hfrwkv_top.sv`: the end-to-end test at 8 lanes. It runs one
  RWKV-shaped command program, checks every result row and every MV cycle
  count, and requires that a stall, an overlap, each array mode, each
  complex operation, LayerNorm and both weight banks each happen at least
  once.
* `tb_rwkv_workload.sv`: the token-mixing front end of one layer at a real
  model width (d = 1024, the 430M model) with every parameter at its
  default. It runs LayerNorm with scale and bias, the token shift, the key,
  value and receptance projections as bank-sized jobs alternating between
  the two weight banks, then sigmoid, exp and division. Change `D` to run
  another model width. Widths 2560 (3B) and 4096 (7B, 24 bank jobs) pass
  as well.
* `tb_hfrwkv_full.sv`: runs the top with every parameter at its default.
  The 512-lane LayerNorm → MV (4096 columns) → sigmoid path runs with the
  weight load overlapping LayerNorm. It finishes in about a minute of
  simulation.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself
through a watchdog if the design hangs. With Verilator 5, from the
repository root:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/hfrwkv_pkg.sv tb/tb_ref_pkg.sv tb/tb_hfrwkv_top.sv \
    --top-module tb_hfrwkv_top -o sim
./obj_dir/sim
```

Substitute any other `tb_*` name. The simulator is two-state, so every
register that is read is reset. The testbenches also pass when uninitialised
state starts at random values (`./obj_dir/sim +verilator+rand+reset+2`).

Useful parameters on `hfrwkv_top`:

* `LANES` (array and LayerNorm width, a power of two);
* `NCU` (dividers and exp/sigmoid units, must divide `LANES`);
* `WDEPTH`, `VDEPTH` and `ADEPTH` (buffer depths in rows);
* `MAX_BLK` (longest LayerNorm vector, in blocks).
