# A fully quantized BERT encoder accelerator in SystemVerilog

BERT-base spends almost all of its encoder time in matrix products:
- projecting 128 tokens of 768 features onto queries, keys and values;
- multiplying queries by keys;
- weighting values by attention probabilities;
- two feed-forward layers.

When every tensor in the encoder is an integer, these products shrink to small multipliers that an FPGA has in large numbers. The integer tensors are:
- 4-bit weights;
- 8-bit activations;
- 32-bit biases;
- 8-bit softmax and layer-norm values;
- integer requantization factors.

This RTL implements such an accelerator for one encoder layer at a time. It is organised around one idea: a *bit-split* inner-product unit built from 8-bit × 4-bit multipliers. The same unit computes:
- activation × weight products (8 × 4 bit);
- activation × activation products (8 × 8 bit, as two nibble products shifted and added).

One array therefore serves all six matrix products of a layer. Two small special-purpose cores sit beside the array, one for softmax and one for residual-add + layer normalization. A host processor keeps the embedding and task layers, and it streams weights in from off-chip memory.

The default build is the 12 × 8 × 16 configuration:
- 12 processing units (PUs), one per attention head;
- 8 processing elements (PEs) per PU;
- 16 multipliers per PE.

It uses BERT-base shapes: sequence 128, hidden size 768, 12 heads, FFN size 3072.

## Data path at a glance

```
 host load port ──► weight buffer (2 banks) ───────────────┐ 4-bit weights, one slice per PE
                 ──► bias / scale / LN-param / exp tables   │
                 ──► I/O buffer (activations, 2 read ports) │
                                  │ 8-bit activation word    ▼
             ┌────────────────────┴────────────── PU 0 … PU 11 ─────────────────────────┐
             │  input muxes: activation ← I/O | K | Attn,  weight side ← W | Q | V      │
             │  PE 0 … PE 7: format change → BIM → accumulator/psum (2 banks) → quant   │
             │  output format change → per-head Q, K, V^T, Attn buffers                 │
             └────────────┬──────────────────────────────────────────────┬─────────────┘
                          │ int8 results (one PU per cycle)              │ score rows
                          ▼                                              ▼
                      I/O buffer ◄── LN core (add & norm) ◄── I/O      softmax core ─► Attn
                                      controller: sequences every stage
```

All PUs receive the same activation word on each cycle. Each PE applies its own weight slice, so one cycle advances 12 × 8 = 96 dot products by 16 terms each.

## The bit-split inner product module (BIM)

A BIM (`bim.sv`) has M = 16 multipliers of 8 × 4 bits. Each multiplier has a sign input that says whether its 4-bit operand is signed. The products go into two adder trees of m = M/2 inputs:
- tree 0 sums products 0..m-1;
- tree 1 sums products m..M-1.

The only shifter sits after the trees:

- **8x4 mode** (activation × weight): the result is `tree0 + tree1`. This is a 16-term dot product of int8 activations with int4 weights. All 16 sign inputs are set.
- **8x8 mode** (activation × activation): the 8-bit operand is split into a signed high nibble and an unsigned low nibble. The high nibbles feed tree 0 and the low nibbles tree 1. Each activation byte goes to both multiplier i and multiplier m+i, and the result is `(tree0 << 4) + tree1`. This gives an 8-term dot product of 8-bit values per cycle.

Putting the shift after the trees saves one shifter per multiplier. The cost is that operands must be arranged for it, so lane i and lane m+i must see the same activation byte. `format_change_in.sv` does this arrangement. In 8x8 mode a 16-byte activation word is consumed in two halves (`half` = 0/1), 8 bytes per beat. The activation may be signed (Q, K) or unsigned (softmax probabilities); `a_signed` selects which.

## From partial sums to int8

Each PE (`pe.sv`) chains the format change, the BIM, an accumulator and a requantizer.

**Accumulator and psum buffer** (`accumulator.sv`). A dot product arrives as a run of beats marked `first` … `last`. The first beat loads the 32-bit bias as the start value, so no separate bias adder is needed. The psum buffer has two banks. While the requantizer drains the finished sum from one bank, the next dot product already accumulates in the other. The array therefore never waits on the multi-cycle requantizer. A dot product can be as short as one beat. `overrun` flags a third sum that would start while both banks are still full; the controller never allows this.

**Requantizer** (`quant.sv`): `y = sat8(round(acc * s_f / 2^shift))`.
- `s_f` is a 32-bit integer scale factor. It folds the activation, weight and output scales of the stage into one fixed-point multiplier.
- Rounding is half-up.
- The requantizer has three pipeline stages.

A result leaves the PE four clock edges after the dot product's last beat.

## Where the data lives

All memories are byte-enabled arrays with a one-cycle synchronous read (`sram_1r1w.sv`, `io_buf.sv`, `weight_buf.sv`). A word of the I/O buffer is M = 16 bytes. A token row of 768 features is 48 consecutive words.

| buffer | contents | layout |
|---|---|---|
| I/O | X, O_A, O_S, O_L, FFN1/FFN2 outputs, next-layer input | row-major, 65,536 words (1 MiB); second read port for the residual input |
| weight | one output group of one linear stage | word c = input word c; PU h, PE n owns bytes (h·8+n)·8 … +7, weight lane i in nibble i (low nibble first); two banks of 192 words × 768 B |
| bias | 32-bit biases | word g = group g, PU h, PE n at bytes (h·8+n)·4 |
| scale | `scale_t` entries | s_f, shift, LN factors s1, s2, LN shift |
| LN parameter | γ, β | word = 16 γ bytes then 16 β bytes |
| Q (per PU) | the head's queries | row r in bank r mod N, so N consecutive query rows are read together |
| K (per PU) | the head's keys | row-major |
| V (per PU) | the head's values, **transposed** | V^T row = one value column, so Att·V reads contiguous rows |
| Attn (per PU) | scores, then probabilities | row r in bank r mod N |

The output format change (`format_change_out.sv`) writes each PE's result directly into these layouts. No separate reshuffling pass is needed between stages. The layouts work out as follows:
- **Q·Kᵀ.** The weight side of PE n is query row (base + n), read from Q bank n. The activation side is key row j, read from K. The 8 PEs of a PU therefore produce 8 scores of one key column at once.
- **Att·V.** The weight side of PE n is Vᵀ row (col + n). The activation is the probability row from the Attn bank.

## Running a layer: stage commands

The host issues one `cmd_t` command per stage in dataflow order:

1. X·W^Q → Q, X·W^K → K, X·W^V → V (`OP_LINEAR`, destinations Q/K/V)
2. Q·Kᵀ → Attn (`OP_QK`)
3. softmax in place in Attn (`OP_SOFTMAX`)
4. Att·V → I/O (`OP_AV`; PU h writes the columns of head h)
5. O_A·W^S → I/O (`OP_LINEAR`)
6. Add & LN of X and O_S → O_L (`OP_ADDLN`)
7. FFN1: O_L·W1 → I/O; FFN2 → I/O (`OP_LINEAR`)
8. Add & LN → next layer's input (`OP_ADDLN`)

The controller (`controller.sv`) runs each matrix stage as three nested loops and issues one beat per cycle to all PUs.

- **Linear stages.** The outer loop walks output groups. A group is N = 8 output columns per PU, 96 columns in all; PU h computes columns h·(groups·8) + g·8 + n. The middle loop walks tokens and the inner loop walks input words.
- **Q·Kᵀ.** The loops walk blocks of 8 query rows, then key rows, then 8-byte half-words.
- **Att·V.** The loops walk blocks of 8 value columns, then query rows, then half-words.

Each issued dot product pushes a (row, column) tag into a small FIFO, and the tag is popped when the result arrives. The tag tells the output path where the result goes:
- **Q/K/V/Attn buffers:** every PU writes its own buffer in the same cycle.
- **I/O buffer:** the PUs share one write port, so results are captured and written one PU per cycle. A dot product must therefore be at least H = 12 beats long when it targets the I/O buffer. Every BERT-base stage satisfies this: 48 beats for d = 768, and 16 half-words for Att·V.

### Weight streaming

Weights do not fit on chip, so every linear stage is cut into output groups, and each group's weights fill one bank of the weight buffer. The protocol runs as follows:
1. The host writes a bank through the load port at 16 bytes per cycle, then pulses `wb_commit`.
2. The controller waits for a full bank before a group starts. Waiting cycles are shown on `stall_w`.
3. The controller releases the bank after the group's last beat.
4. The host refills the released bank while the next group computes.

A group of a 768-input stage takes 128 × 48 = 6,144 compute cycles and 48 × 48 = 2,304 load beats. An FFN2 group takes 24,576 compute cycles and 9,216 load beats. Loading therefore hides behind computation whenever the host keeps up with 16 B per cycle.

## Softmax core

`softmax_core.sv` processes one row of int8 scores in three passes over an internal row buffer:
1. **Load and maximum.**
2. **Exponentials.** `e = LUT[max - x]` is a 256-entry, 8-bit table. Subtracting the maximum keeps every exponent ≤ 0, so the table only has to cover values in (0, 1].
3. **Normalization.** One reciprocal `R = 2^24 / Σe` is computed, then `p = min(255, (e·R + 2^15) >> 16)` for each element. The result is an unsigned 0.8 fixed-point probability.

The exp table is loaded by the host. Entry d should hold round(255 · exp(−d · Δ)), where Δ is the score's quantization step. A row of L scores takes 3L + 1 cycles. The controller feeds the rows of all 12 heads one after another through a single core.

## Layer-norm core

`ln_core.sv` handles residual add and normalization together, 16 elements per cycle:
1. **Stage 1:** `z = s1·a + s2·b` combines the residual with the sub-layer output, using two 8-bit scale factors, and accumulates the mean.
2. **Stage 2:** `d = z − mean` and the variance are computed, then `std = isqrt(var)` (a 20-step bit-serial root) and `inv = 2^24 / std`.
3. **Stage 3:** `y = sat8(round(d · inv · γ / 2^ln_shift) + β)`.

The three stages form a pipeline across rows. Each row sits in one of three row banks, and the banks rotate: while stage 3 emits row k, stage 2 works on row k+1 and stage 1 takes in row k+2. A finished row moves on as soon as the next stage is empty. The controller starts a new input row whenever stage 1 is free.

- A lone row of W words takes 3W + 24 cycles from its first input word to its last output word.
- Back-to-back rows leave every W + 23 cycles. Stage 2 is the slowest stage, because it includes the square root.

## Timing

Measured in simulation, a linear stage takes T · (Din/16) · (Dout/96) cycles plus about 20 cycles of drain. At full size, X·W^Q is 128 × 48 × 8 = 49,152 cycles, measured as 49,177. The other per-layer costs are:

| stage | cycles |
|---|---|
| Q·Kᵀ | 128 · 16 · 8 = 16,384 |
| Att·V | 16,384 |
| softmax | 12 · 128 · (3·128 + 3) ≈ 594,000 |
| each Add & LN | 128 · (48 + 23) + pipeline fill ≈ 9,200 |
| FFN1 and FFN2 | 196,608 each |

A BERT-base layer totals about 1.24 M cycles, and 12 layers about 14.8 M cycles. The full-size layer simulation measures 1,252,454 cycles for the 11 stages; softmax alone takes 594,433. That is roughly 69 ms at 214 MHz. The published implementation reports 43.9 ms for this configuration. Most of the gap is the single softmax core, which handles one element per cycle and pass.

Both evaluated tasks, SST-2 and MNLI, fit at the default sizes. They run BERT-base at batch 1 with 128-token sentences. The arithmetic:
- **Activations:** one layer's activations need 61,440 of the 65,536 I/O words.
- **Weight buffer:** the longest dot product has 3,072 inputs, which is 192 weight words, exactly one bank.
- **Per-head buffers:** each head's Q, K, Vᵀ and score matrix fit the per-PU buffers.

## Departures and gaps

- **GeLU** between FFN1 and FFN2 is not implemented. FFN1's output is requantized and passed on unchanged. A hardware GeLU (for example a 256-entry table applied on the I/O write path) would be an addition of this design.
- **Off-chip interface.** The weight path is a plain 16-byte load port with a commit/release handshake, not an AXI4 master. The host model in the testbenches plays the off-chip memory.
- **Softmax scheduling.** The published dataflow diagram draws softmax overlapping the Q·Kᵀ and Att·V slots. Here softmax is a separate stage between them, and the PU array is idle while it runs. See Timing above.
- **Attention scaling.** The 1/√d scaling of the scores has no unit of its own. It is folded into the requantization factor s_f of the Q·Kᵀ stage.
- **Reference sizes.** Head size 64, hidden 768 and FFN 3072 are the standard BERT-base shapes. They are not parameters taken from the accelerator description.
- **Numeric formats.** All of the following are this design's choices: the stage command format, the buffer layouts, the exp-table indexing, the reciprocal-based normalizations, the integer square root and the rounding modes.
- **Reset.** Reset is asynchronous and active low. Buffers are not cleared; every word is written before it is read.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block against an integer model written in the testbench and prints `TB_RESULT checks=… failures=…`.

| testbench | what it checks |
|---|---|
| `tb_bim` | random 8x4 and 8x8 dot products, signed and unsigned activations |
| `tb_format_change_in` | lane mapping in both modes |
| `tb_accumulator` | random-length sums with bias start values, back-to-back sums (both psum banks in use), overrun when the reader stalls |
| `tb_quant` | rounding, shifts, saturation, 3-cycle latency |
| `tb_pe` | whole PE against the formula, including the result latency |
| `tb_sram_1r1w`, `tb_io_buf` | byte enables, read latency, both read ports |
| `tb_weight_buf` | fill/commit/release sequence and bank contents |
| `tb_softmax_core` | rows of several lengths, each output within 3/256 of the exact softmax on the same table, 3L+1 cycles per row |
| `tb_ln_core` | lone rows against the fixed-point model (3W+24 cycles each); back-to-back rows overlapping in the pipeline, one row every W+23 cycles |
| `tb_format_change_out` | addresses and byte enables of all four layouts |
| `tb_pu` | a small PU in 8x4 and 8x8 modes through its buffers |
| `tb_controller` | beat sequences, weight stalls, bank releases and I/O serialization against a PU model |
| `tb_fqbert_top` | a full encoder layer (all 11 stages) on a reduced array (M=8, N=4, 2 PUs, sequence 16, hidden 32, FFN 64) against a reference model |
| `tb_fqbert_full` | the default-size accelerator running X·W^Q: 128 × 768 × 768, weights streamed in 8 groups, all 98,304 outputs compared, stage time checked |
| `tb_fqbert_layer_full` | one whole BERT-base encoder layer (the per-layer work of SST-2 and MNLI at 128 tokens) at the default size, all 11 stages and 72 weight groups, all 638,976 output bytes compared; prints each stage's cycle count |

`tb_fqbert_top` counts each mechanism and fails if any never happens:
- weight-buffer stalls;
- bank hand-overs;
- switches between 8x4 and 8x8 mode;
- accumulation into one psum bank while the other waits for the requantizer;
- requantizer saturation;
- softmax rows and LN rows;
- LN rows overlapping in the LN pipeline.

`tb_fqbert_full` and `tb_fqbert_layer_full` leave every parameter at the default. With verilator, the first runs in under a minute and the second in about four minutes, build included. In the layer test the host model loads weights at one beat per two cycles. FFN2 then waits for weights at times and takes about 209k cycles instead of 197k.

To run a testbench with verilator:

```
verilator --binary --timing --assert -Irtl rtl/fq_pkg.sv rtl/*.sv tb/tb_fqbert_top.sv --top-module tb_fqbert_top
./obj_dir/Vtb_fqbert_top
```

## Files

`rtl/`:
- `fq_pkg.sv`: shared types (modes, stage command, scale entry).
- PE datapath: `bim.sv`, `format_change_in.sv`, `accumulator.sv`, `quant.sv`, `pe.sv`.
- PU level: `format_change_out.sv`, `pu.sv`.
- Memories: `sram_1r1w.sv`, `io_buf.sv`, `weight_buf.sv`.
- Cores: `softmax_core.sv`, `ln_core.sv`.
- Sequencing and top: `controller.sv`, `fqbert_top.sv`.

`tb/`: one testbench per block, plus the whole-design tests `tb_fqbert_top`, `tb_fqbert_full` and `tb_fqbert_layer_full`.
