# A processing-in-memory Transformer core with a compressed KV cache

Transformer decoding spends most of its time moving two kinds of data:
the weights, and the key/value (KV) cache that grows with every generated token.
This RTL covers two processing-in-memory ideas for that problem:

1. **A digital compute-in-memory (DCIM) Transformer core, `pim_core`.** The
   weight matrices stay inside the arrays that multiply with them. The KV cache
   is compressed on the fly, as the keys and values are produced:
   - first, the least important elements are **pruned**;
   - then each surviving element is **quantised to 2 bits** with parameters
     kept per channel;
   - the result is **reordered** so that only non-zero data has to travel to
     and from external memory.

   Quantisation parameters never have to be recomputed for old tokens. A
   channel gets a new *level* of parameters only when a new token falls
   outside the range the channel has seen so far. This is the hierarchical
   quantisation extension (HQE).
2. **A ReRAM crossbar attention head, `sda_submatrix_pipeline`.** It computes
   scaled dot-product attention without ever writing K or V into a crossbar.
   The products are regrouped so that only matrices known before inference
   (the weights and the token matrix X) are stored. Rows of the query are then
   pipelined through the crossbars, so consecutive matrix products overlap.

The top level `pim_accel` holds both engines side by side. They share only the
clock and reset.

All arithmetic is integer: int8 activations, weights and KV values; int2
compressed KV codes; 32-bit accumulators. Default sizes are those of the core
diagram: hidden width 768, heads of 64, so 12 heads. The FFN width of 3072 and
the 128-token KV capacity are this design's assumptions.

---

## 1. The core and its dataflow

One `CMD_DECODE` runs one Transformer layer for one token:

```
x ─► LN1 ─► Q/K/V DCIM ─┬─ q ───────────────────────────────┐
                        └─ k, v ─► pruning ─► quantiser ─►  │
                                   (PU)       (QU, HQE)     │
                                                 │          │
                                   SZ buffer ◄───┤          │
                                       │         ▼          │
                                       │    data reorder ─► global buffer ◄─► HBM port
                                       │                        │
                                       └────► dequantiser (DQU) ◄┘
                                                  │ restored k, v of each cached token
                          key selector ◄──────────┘ (fresh k of the current token)
                               │
                 CE array A: q·k per head ─► softmax per head ─► CE array B: Σ p·v
                                                                       │
         y ◄── FC2 ◄── ReLU ◄── FC1 ◄── LN2 ◄── Out DCIM ◄─────────────┘
```

The FSM inside `pim_core` (the "top controller") runs the stages one after
another. Every stage streams one element, or one token, per cycle.

### Commands

`cmd` is taken when `cmd_valid && cmd_ready`. `x_in` is sampled in the same
cycle. `done` pulses when the core is idle again.

| cmd | name | what happens |
|---|---|---|
| 0 | `CMD_CALIB` | Prefill token. K and V are computed and pruned. Each channel's min/max over the kept values is recorded. Nothing is stored. |
| 1 | `CMD_FINALIZE` | Level 0 of every K and V channel is computed from the recorded ranges and written to the SZ buffer. This walks 2·768 channels, one per cycle. |
| 2 | `CMD_APPEND` | Prefill token. K and V are compressed with the existing levels and stored as token `n_tokens`. |
| 3 | `CMD_DECODE` | New token. K and V are compressed with range extension (HQE) and stored. Attention runs over every stored token, followed by Out, LN2 and the FFN. `y_valid` pulses with `y_out`. |

A prefill therefore runs as: `CALIB` for every context token, then `FINALIZE`,
then `APPEND` for every context token.

### Loading weights

- Drive `wl_we` with `wl_sel` = 0..5 for Q, K, V, Out, FC1 and FC2.
- `wl_row` selects the row. Row *r* of W goes in `wl_data`, with column *c* at
  bits `[8c +: 8]`.
- Products are formed as y = x·W, with x a row vector.

### Fixed point between stages

- The sums from the projections, FC1 and FC2 are brought back to int8 by an
  arithmetic right shift of 8 (`PROJ_SHIFT`, `FFN_SHIFT`), with saturation.
- Layer-normalised values are in Q2.5.
- Probabilities use 256 for 1.0. The value sums are divided by 256 with the
  same shift.
- There are no residual additions and no learned LayerNorm gain or bias (see
  section 7).

---

## 2. The compressed KV cache

This part is the hardest to follow, so it gets the most room.

### 2.1 Pruning (`pruning_unit`)

A K or V element x is **kept** if `x != 0` and `|x| >= prune_thr`. The decision
is per element, with one programmable threshold. It applies to prefill and
decode tokens alike. A pruned element is never quantised and takes no space
other than one index bit.

### 2.2 Per-channel int2 quantisation (`quant_unit`)

Each of the 2·768 channels (K channels first, then V) has a range
[lo, hi] of kept values. From the range:

```
s = max(1, ceil((hi - lo) / 3))          integer scale
z = -2 - round(lo / s)                   zero point
q = clamp(round(x / s) + z, -2, 1)       int2 code
x' = s · (q - z)                         restored value
```

Rounding is half away from zero.

Worked example (16 values, threshold 9):

- Input: `3 5 -7 9 20 18 35 -4 8 -2 11 68 0 -15 30 7`
- Kept values: `9 20 18 35 11 68 -15 30`. The range is [-15, 68], so s = 28
  and z = -1.
- Codes of the kept values: `-1 0 0 0 -1 1 -2 0`.
- Restored vector: `0 0 0 0 28 28 28 0 0 0 0 56 0 -28 28 0`.

The unit also monitors each channel's range at run time. That is what the
next section uses.

### 2.3 Levels (HQE) and the SZ buffer (`quant_unit`, `sz_buffer`)

- **Level 0.** Its parameters come from the prefill range (`CALIB` …
  `FINALIZE`).
- **Opening a level.** During decode, a kept value can fall outside the
  newest level's range of its channel. The quantiser then widens the range to
  include the value, computes a new (s, z) and writes it to the SZ buffer as a
  new level. The entry is tagged with the token number at which the level
  starts. The value itself is coded with the new level.
- **Old tokens are never requantised.** Their codes stay valid because each
  token is restored with the level that was current when it arrived.
- **Level limit.** After `MAX_LEVELS` = 4 levels a channel cannot widen any
  more. Out-of-range values are clamped, and `sat_events` counts them.
- **Lookup.** The SZ buffer holds, per channel and level, `{scale, zero,
  start_tok}`. Asked for (channel, token), it returns one cycle later the
  newest level whose `start_tok` ≤ token.

### 2.4 Record format (`kv_packer`)

Each stored K or V vector becomes one record of three fields:

| field | bits | content |
|---|---|---|
| index | 768 | 1 where the element was kept, in channel order |
| label | one per kept element | 1 where the kept element's code is non-zero |
| data | 2 per non-zero code | the non-zero codes, in order |

For the example above:

- index = `0001 1110 0011 0110`
- label = `1 0 0 0 1 1 1 0`
- data = `-1 -1 1 -2`

Zero codes cost one label bit and no data bits. The record length is
768 + kept + 2·nonzero bits. `kv_nz_bits` adds up this length, which is the
traffic an HBM transfer of only the non-zero data would need.

Inside the global buffer a record has a fixed slot of 768·4 bits. Label and
data are packed from bit 0 of their fields.

### 2.5 Restoration (`dequant_unit`)

For one record the DQU walks the 768 channels, one per cycle:

1. The index bit says whether the element exists.
2. A running count of kept elements selects the element's label bit.
3. A running count of non-zero labels selects its 2-bit code.
4. The SZ buffer, asked with (channel, token), supplies s and z.

The output is s·(q − z), saturated to int8, or 0 for a pruned element. A
restored vector is ready 770 cycles after `start` (CH + 2).

### 2.6 Global buffer and HBM port (`global_buffer`)

- The buffer is dual-ported. Port A belongs to the core. Port B is brought
  out of the top as `hbm_*`, for moving records to and from external HBM.
- Token t's K record sits at address 2t and its V record at 2t + 1.
- Both ports have registered reads (one cycle).
- The HBM itself is off-chip and not modelled.

---

## 3. Attention on the CE arrays

**CE array (`ce_array`, `ce`).** There is one computing engine (CE) per head.
Each CE forms a 64-element dot product in one cycle:

- In score mode it computes q·k for its head.
- In value mode it adds p·v into 64 accumulators.

**Zero gating.** A lane whose operand is zero does not switch: its product is
forced to 0 and it is not counted. Pruned KV elements restore to exactly 0,
so the sparsity made by pruning shows up as idle lanes. `ce_active_lanes`
counts the lanes that did work.

**Key selector.** This is a 2:1 multiplexer in front of the score engines:

- The token being decoded uses its own **fresh** key, straight from the K
  macro. Its compressed record has just been written.
- Every older token uses the key **restored** by the DQU.

Values always go through the DQU. `fresh_key_uses` counts the first case.

**Softmax (`softmax_unit`).** It computes
A_i = exp((s_i − M)/√d_k) / Σ exp(·) in base 2:

- t = ((M − s)·739) >> 8 is (M − s)·log2(e)/√64 in Q.4.
- e = LUT[t mod 16] >> (t / 16), using a 16-entry table of 2^(−k/16) scaled
  by 2^16.
- p = round(256·e / Σe).

Scores go in one per cycle. The first probability comes out n + 2 cycles
after the last score, then one per cycle.

---

## 4. Layer normalisation, projections and FFN

**`dcim_macro`.** One weight matrix stored row by row, with COLS 32-bit
accumulators. `start` clears the accumulators. Then one input element per
cycle is multiplied with its whole weight row and added in. `done` comes with
the last element. A 768-input product therefore takes 768 cycles. Six
instances exist: Q, K, V and Out are 768×768, FC1 is 768×3072 and FC2 is
3072×768.

**`layernorm`.** It normalises exactly in integers:

- Sums S = Σx and Q = Σx² are taken while the vector streams in.
- V = N·Q − S² is N² times the variance. D = ⌊√V⌋ is found one bit per
  cycle.
- Each output is y = sat8(round((N·x − S)·32 / D)).
- The first output comes 34 cycles after the last input.

**`relu_unit`.** Registered max(0, x) on the 3072-element FC1 output.

---

## 5. The ReRAM attention head

### 5.1 Why regroup the products

A crossbar can only multiply by a matrix that has been programmed into it.
Programming is column by column and slow. Computing Q·Kᵀ the usual way means
writing the freshly computed K into a crossbar first, so compute must wait on
the write, which waits on compute. The head avoids this:

```
Out = Q · Kᵀ = (Q · W_Kᵀ) · Xᵀ          Res = S · V = (S · X) · W_V
```

Only W_Q, W_Kᵀ, W_V and the token matrix X are programmed, all before
inference. X is stored once. A *dual-access* crossbar reads it either as X
(for S·X) or as Xᵀ (for R·Xᵀ).

### 5.2 Crossbar model (`reram_crossbar`, behavioural)

- It computes an ideal integer vector–matrix product.
- It has a normal and a transposed read.
- A programmed column keeps the array busy for `WLAT` = 8 cycles.
- A product is ready `LAT` = 4 cycles after `start`.

It stands for an analog array with its converters. The timing numbers are
placeholders, not device data.

### 5.3 The sub-matrix pipeline (`sda_submatrix_pipeline`)

Rows X_i enter one at a time and pass through six stages:

| stage | computes | engine |
|---|---|---|
| 1 | Q_i = X_i·W_Q | crossbar W_Q |
| 2 | R_i = Q_i·W_Kᵀ | crossbar W_Kᵀ |
| 3 | Out_i = R_i·Xᵀ | crossbar X, transposed |
| 4 | S_i = softmax(Out_i/√d_k) | softmax unit |
| 5 | P_i = S_i·X | crossbar X, normal |
| 6 | Res_i = P_i·W_V | crossbar W_V |

Between crossbars, results are shifted right by 8 and saturated to int8.

**Overlap.** Each stage owns one output register. A stage starts when its
input is full, its own register is free and its engine is idle. So row i+1
moves through W_Q and W_Kᵀ while row i is still at X or in the softmax.
`overlap_cycles` counts cycles with two or more crossbars busy.

**Sharing X.** Stages 3 and 5 share the X crossbar. Stage 5 wins a tie.
`x_stalls` counts cycles in which one of them waited for the other.

**Where the time goes.** At these sizes the softmax is the slowest stage. It
needs N cycles in and N cycles out per row. At N = 128:

- the first row needs 417 cycles;
- all 128 rows need about 49 000 cycles, against about 53 000 if rows did not
  overlap.

At small N the gain is larger: 8 rows take 232 cycles against 8 × 57.

---

## 6. Timing summary (default sizes)

| operation | cycles |
|---|---|
| decode with n tokens in cache (including the new one) | about 9 300 + 1 550·n (13 944 at n = 3) |
| `CMD_FINALIZE` | about 2·768 |
| ReRAM head, one row alone | 417 |

The decode cost per cached token comes from restoring K, scoring, restoring V
and accumulating: about 2·(768 + 5) cycles, since the DQU restores one
channel per cycle.

---

## 7. Departures from the paper and open points

- **One core, one layer.** The paper runs the end-to-end model on many cores.
  How a model is split across cores, and how the cores talk, is not given, so
  only one core is built. OPT-6.7B (4096 wide, 32 layers) does not fit it.
- **External HBM** is a bought DRAM part. Only the buffer port toward it
  exists.
- **CAM-based attention retrieval** (nearest-neighbour search of keys) is
  described only as a direction with analog CAM devices. It is not built.
- **The two engines are separate.** The paper presents them as separate
  architectures. `pim_accel` places them side by side with no data path
  between them.
- **Not drawn, so not built:** residual additions, LayerNorm gain and bias,
  and a GELU (the diagram shows ReLU).
- **Exponential.** The softmax uses a base-2 table rather than exact exp.
- **DCIM macros** are behaviourally exact integer arrays. The bit-serial SRAM
  circuit of a real DCIM macro is not modelled.
- **CE activation.** The paper says the CE "activates processing units
  according to the input data size". Here a lane is gated when an operand is
  zero. There is no separate sizing of the number of active CEs.
- **Assumed numbers, not from the paper:** 4 HQE levels per channel, the
  128-token buffer, FFN width 3072, the shifts between stages, and the
  crossbar timing.
- **Record storage.** Records are kept at a fixed slot width inside the
  buffer. Only the traffic count reflects the compressed size.

---

## 8. Verification and simulation

Every block has a self-checking testbench in `tb/`. Each one compares the RTL
with an independent procedural model in `tb/pim_ref_pkg.sv` or in the
testbench itself, and ends by printing
`TB_RESULT checks=<n> failures=<m>`.

**Tests built on the worked example of section 2.** `tb_pruning_unit`,
`tb_quant_unit`, `tb_kv_packer` and `tb_dequant_unit` use that 16-value
example, plus random vectors.

**`tb_pim_core` and `tb_pim_accel`** run the whole flow at reduced size
(D = 32, 2 heads of 16, 8 tokens):

- random weights;
- prefill calibration, finalise and append;
- an HBM-side read and a read-back/write-back of a record;
- three decodes.

They check every output element and every status counter against a full
model of the layer. They also fail if any mechanism never happened: pruning,
a kept element, an HQE level opening, a level saturation, a fresh key through
the key selector, lane gating, and, for the ReRAM head, pipeline overlap and
X-crossbar sharing.

**`tb_pim_accel_full`** runs the same test with the top at its default sizes:
2 prefill and 10 decode tokens on the core, and all 128 rows through the
ReRAM head. It finishes in a few seconds of wall-clock time on a desktop machine.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
    --top-module tb_pim_accel_full \
    rtl/pim_pkg.sv tb/pim_ref_pkg.sv tb/tb_pim_accel_full.sv -o sim
./obj_dir/sim
```

The same pattern works for any `tb_<block>`.

## File map

| file | role |
|---|---|
| `rtl/pim_pkg.sv` | sizes, SZ entry type, command encoding, int8 saturation |
| `rtl/pim_accel.sv` | top: core and ReRAM head |
| `rtl/pim_core.sv` | core datapath and top controller FSM |
| `rtl/dcim_macro.sv` | weight matrices |
| `rtl/layernorm.sv`, `rtl/softmax_unit.sv`, `rtl/relu_unit.sv` | nonlinear units |
| `rtl/ce_array.sv`, `rtl/ce.sv` | computing engines and key selector |
| `rtl/pruning_unit.sv` | element pruning |
| `rtl/quant_unit.sv`, `rtl/sz_buffer.sv` | HQE quantisation and its parameter store |
| `rtl/kv_packer.sv`, `rtl/dequant_unit.sv` | record reorder and restoration |
| `rtl/global_buffer.sv` | on-chip record store |
| `rtl/reram_crossbar.sv` | behavioural crossbar model |
| `rtl/sda_submatrix_pipeline.sv` | ReRAM attention head |
