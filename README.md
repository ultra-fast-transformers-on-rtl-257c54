# A streaming fixed-point transformer for jet flavour tagging

At the LHC a Level-1 trigger must decide within a few microseconds whether a
collision is worth keeping. This design brings a small transformer into that
budget. It looks at the charged-particle tracks of one jet and says whether the
jet came from a bottom quark, a charm quark or a light quark or gluon. The
model is the one described in *Ultra Fast Transformers on FPGAs for Particle
Physics Experiments* (Jiang et al.): three encoder blocks with two-head
self-attention, then a small dense classifier, 9135 parameters in all, in
20-bit fixed point. That work produced its firmware with an HLS compiler
(hls4ml). The SystemVerilog here is a hand-written register-transfer
description of the same network and of the four-stage attention pipeline it
describes. The choices that work leaves open are filled in here and listed
below.

The main idea is to **stream the jet one track at a time**. Every layer works
on one row (one track, six features) per clock, and each multiply has its own
multiplier ("reuse factor 1"). Attention is the only step that needs the
whole jet. It therefore works in two phases: it first takes in all 15 rows and
keeps their keys and values in registers, then emits one output row per clock.
The softmax inside attention and at the output reads exponentials and
reciprocals from tables instead of computing them.

## The network

A jet is a sequence of 15 tracks, sorted by transverse impact-parameter
significance and zero-padded if the jet has fewer tracks. Each track has six
features: d0, dz, their significances, ΔR(track, jet) and
pT(track)/pT(jet). There is no positional encoding and no attention mask, so
padding rows are processed like any other row.

| Layer | Shape | Parameters |
|---|---|---|
| Encoder ×3: attention Q, K, V projections | 6 → 2 heads × 32, each with bias | 3 × 448 |
| Encoder ×3: attention output projection | 64 → 6 | 390 |
| Encoder ×3: feed-forward | 6 → 8 (ReLU) → 6 | 56 + 54 |
| Flatten | 15 × 6 → 90 | – |
| Dense | 90 → 32 → 16 → 8 (ReLU) | 2912 + 528 + 136 |
| Output | 8 → 3, softmax | 27 |

Each encoder holds 1844 parameters. 3 × 1844 + 3603 = 9135, the
parameter count of the original model. An encoder block computes

    h = x + MHA(x)
    y = h + FF(h)

without layer normalisation. The original work leaves it out on purpose.

## Number format

Every activation, weight and bias is a signed 20-bit number with 10 fractional
bits (`tf_pkg::data_t`). This is the narrowest format the original study found
to match the floating-point classifier. The rounding rules are this design's
own:

* A layer forms all its products at full width and sums them exactly in a
  48-bit accumulator. The bias is added aligned to the products.
* The sum is shifted right by 10 bits, which rounds toward minus infinity.
  The result is then saturated to the 20-bit range.
* Residual adds saturate.

The testbench reference model uses exactly these rules, so the testbenches
compare results bit for bit.

## The attention layer (`mha`)

This is the part of the design that takes most explaining. It follows the
four stages of the original pipeline:

```
             stage 1                  stage 2                 stage 3          stage 4
row in ──► Q,K,V projections ─Q─► FIFO ─► q·K^T /√32 ─► softmax ─► p·V ─► concat ─► 64→6 ─► row out
   (dense_row ×3)   └─K─► K register [15][64] ┘                  │              (dense_row)
                    └─V─► V register [15][64] ───────────────────┘
```

**Load phase (15 cycles).** `in_ready` is high. For each accepted row, three
`dense_row` units compute the 64-wide query, key and value vectors, covering
both heads at once. Each query is read only once, so it goes into a FIFO. The
key and value rows are needed by every later query, so they are written into
row `t` of two register arrays.

**Compute phase (17 cycles).** `in_ready` is low. Each clock one query row
leaves the FIFO and passes through four registered steps:

1. `attn_score` takes, for each head, the dot products of the query with all
   15 key rows in parallel. Each product is scaled by 1/√32, implemented as a
   multiply by 181/1024.
2. `softmax_lut` turns the 15 scores of each head into probabilities.
3. `attn_value` multiplies each head's probability row by that head's 15 × 32
   value rows. The value array is written by row but read by column. That is
   all the "matrix reshape" of the original pipeline needs in hardware.
4. The two 32-wide head outputs are concatenated, head 0 first, and projected
   back to six features by a fourth `dense_row`.

The layer returns to the load phase when the last query has left step 3. From
then on the key and value registers are free for the next jet, while the last
rows drain from step 4.

Timing without back-pressure:

* The first output row comes in the 5th cycle after the cycle that accepts
  the last input row.
* The remaining rows follow one per cycle.
* A new jet is accepted every 2·15 + 2 = 32 cycles.

Back-pressure works as follows. Steps 1–4 advance only when the output
register is empty or being read. A stalled consumer therefore freezes the
pipeline without losing or reordering rows.

`encoder_block` wraps `mha`:

* A skip FIFO of 30 rows keeps each input row until its attention row comes
  out.
* A combinational row path then computes both residual adds and the two
  feed-forward layers.
* An output register ends the path. It adds one cycle, so an encoder presents
  its first row in the 6th cycle after its last input row.

## Softmax with two tables (`softmax_lut`)

Both softmaxes use the same unit: the 15-wide one in attention and the 3-wide
one at the output. Both of its tables have 1024 entries. They are computed
during elaboration from the formulas below, so no data files are needed.

    m    = max x[i]
    k[i] = min(1023, floor((m - x[i]) * 64))       exponent index, step 1/64
    e[i] = EXP[k[i]],  EXP[k] = round(2^16 * exp(-k/64))
    S    = sum e[i]                                 S >= 1 because e[argmax] = 1
    j    = min(1023, floor(S * 64))
    r    = INV[j],     INV[j] = min(2^18-1, round(2^16 * 64 / (j + 0.5)))
    y[i] = floor(e[i] * r / 2^22)                   10 fractional bits

The maximum is subtracted first, so every exponent is at most zero. One table
of range 16 then covers every input, and an exponent below −16 reads as
EXP[1023] (≈ 0). The outputs sum to 1.0 within about 2 %. The error comes from
the 1/64 steps of the reciprocal index.

## Classifier (`classifier_head`)

The flatten buffer collects the 15 rows of the last encoder into a 90-element
vector, track 0 first. While the buffer is full it refuses new rows. The
vector then passes four registered dense layers and the softmax register. The
three probabilities appear in the 6th cycle after the last row, in the order
b, c, light.

## Parameters (`weight_mem`)

The original firmware compiles the trained weights in as constants. This
design instead keeps all 9135 numbers in a register array. A word-wide port
writes one word per clock (`wload_en`, `wload_addr`, `wload_data`), so one
netlist runs any trained model. Every word drives its multiplier directly. The
layout follows the order in which Keras lists a model's weights, with kernels
stored row-major as `[input][output]`. Per encoder `e` (base `e·1844`):

| Offset | Content | Offset | Content |
|---|---|---|---|
| 0 | Wq (6 × 64) | 1344 | Wo (64 × 6) |
| 384 | bq (64) | 1728 | bo (6) |
| 448 | Wk | 1734 | W1 (6 × 8) |
| 832 | bk | 1782 | b1 (8) |
| 896 | Wv | 1790 | W2 (8 × 6) |
| 1280 | bv | 1838 | b2 (6) |

In Wq, Wk and Wv, output column `h·32 + d` is dimension `d` of head `h`. This
matches the Keras `(input, head, dim)` kernel shape. The classifier follows at
5532: W1 (90 × 32), b1, W2 (32 × 16), b2, W3 (16 × 8), b3, W4 (8 × 3), b4.
`tf_pkg` holds all of these offsets as constants.

## Top-level interface and timing (`transformer_top`)

| Port | Dir | Width | Use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset of control state (not of weights) |
| `wload_en/addr/data` | in | 1/14/20 | parameter writes; complete them before the first jet |
| `in_valid`, `in_ready`, `in_row[6]` | in/out/in | 1/1/6×20 | one track per handshake, 15 per jet |
| `out_valid`, `out_ready`, `out_prob[3]` | out/in/out | 1/1/3×20 | one result per jet |

Without back-pressure:

* A jet's result is presented 66 cycles after the cycle that takes its last
  track. Each encoder takes 6 cycles to its first row and 14 more to its last
  row, and the next stage needs that last row before it can start. That makes
  3 × 20 cycles, plus 6 for the classifier.
* Back-to-back jets are accepted every 32 cycles.
* Several jets can be in flight at once, at most one in each encoder and one in the
  classifier.

For scale: the original HLS build reports 2.077 µs latency and a new result
every 49 cycles at 6.58 ns. Those numbers come from a different schedule. They
should not be read as predictions for this RTL, whose clock rate has not been
measured.

## Files

| File | Contents |
|---|---|
| `rtl/tf_pkg.sv` | number format, dimensions, parameter layout, saturating helpers |
| `rtl/dense_row.sv` | fully parallel dense layer on one row |
| `rtl/sync_fifo.sv` | FIFO (query rows, skip path) |
| `rtl/attn_score.sv`, `rtl/softmax_lut.sv`, `rtl/attn_value.sv` | attention stages 2 and 3 |
| `rtl/mha.sv` | multi-head attention with load/compute control |
| `rtl/encoder_block.sv` | attention + residuals + feed-forward |
| `rtl/classifier_head.sv` | flatten, dense 32/16/8/3, softmax |
| `rtl/weight_mem.sv` | loadable parameter store |
| `rtl/transformer_top.sv` | the complete tagger |
| `tb/tb_ref_pkg.sv` | independent integer model of the whole network |
| `tb/*_tb.sv` | one self-checking testbench per module |

## Verification

Each testbench drives random data and compares every output with
`tb_ref_pkg`. That package models the network with plain integers and
evaluates `exp` and `1/x` directly rather than through tables. Each
testbench prints `TB_RESULT checks=N failures=M`.

* The attention, encoder, classifier and top-level testbenches also check
  the cycle counts given above.
* They run first with no stalls, then with random input gaps and random
  output back-pressure.
* `transformer_top_tb` runs the whole tagger at full size. It loads 9135
  random weights and streams six jets. It checks bit-exact probabilities, the
  66-cycle latency and the 32-cycle jet interval. It also checks that input
  stalls, output back-pressure, input gaps and several jets in flight each
  happen at least once.

Random weights make no physics claim: no trained model ships with the design.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl \
    rtl/tf_pkg.sv tb/tb_ref_pkg.sv tb/transformer_top_tb.sv --top-module transformer_top_tb
./obj_dir/Vtransformer_top_tb
```

For another module, replace both `transformer_top_tb`s with its testbench name.
The full-size top takes about a minute to build and a second to run. The other
testbenches take seconds.

## Departures from the original design, and open points

* **Rounding, saturation, table sizes, index scaling and the 1/√dk constant**
  are this design's own. The original gives only the 10.10 format and says
  that the softmax uses an exponential table and an inverse table. Bit-level
  results will differ from an hls4ml build.
* **Activations.** The original does not name the activations of its hidden
  layers. ReLU is used after the first feed-forward layer and the three
  classifier hidden layers. The layers that feed a residual add or the softmax
  are linear. Change `RELU` on the `dense_row` instances if a trained model
  differs.
* **Scaling.** The text says scores are divided by "the dimension of the key
  vectors, √dk". The formula (1/√32) is followed.
* **Storage.** Keys and values live in registers, as the original's stage 2
  and 3 descriptions say. A general remark in the original places frequently
  read data in block RAM; that is not followed, because every row is read in
  every cycle. Between stages 3 and 4 there is one pipeline register instead
  of the FIFO the original mentions, because stage 4 never falls behind.
* **No load/compute overlap** inside an encoder. Double-buffering the key and
  value registers would let a jet enter every 17 cycles instead of every 32.
  The original does not say how its stages overlap.
* **Only reuse factor 1** (one multiplier per product) is built. The reuse
  factor 2 and 4 variants studied in the original are not.
* **Only the 10.10 format** is exercised. `DATA_W`/`FRAC_W` in `tf_pkg` are
  parameters, but the softmax index needs `FRAC_W ≥ 6` and `SCORE_SCALE`
  assumes 10 fractional bits.
* **Size.** The fully parallel network has about 14,000 multipliers: 3 ×
  (1152 + 960 + 960 + 384 + 96) in the encoders plus about 3,500 in the
  classifier. This is the same order as the ~12,000 DSPs the original reports
  at reuse factor 1. Timing closure of the long combinational paths (a
  90-input sum, a 15-input softmax) has not been studied. Splitting them with
  extra registers changes only the latencies quoted above.
