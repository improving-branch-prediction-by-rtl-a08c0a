# Ternary CNN helper branch predictor

Modern branch predictors get almost every static branch right, but a few
"hard-to-predict" branches (H2Ps) cause a large share of the remaining
mispredictions. A common cause is a loop with a data-dependent trip count
sitting between the H2P and the branch it actually depends on: the
predictive branch appears at a different position in the global history
every time, which defeats predictors that match exact history sequences
(TAGE-style) or learn one weight per history position (perceptrons).

A small two-layer convolutional network copes with that shift. Layer 1 is a
set of *m* filters of width 1 that is applied to every history position and
recognises *which* ⟨IP, direction⟩ tuples matter, wherever they occur.
Layer 2 is one linear filter over all positions that decides *how much*
each position counts (for example, only the most recent 30). The network
is trained offline per H2P, with 2-bit (ternary, {-1, 0, +1}) weights, and
uploaded into the branch prediction unit, where it runs as a "helper" next
to the baseline predictor and overrides it for its one H2P.

This RTL implements one such helper: the history hash, the Layer-1 response
table, the FIFO of Layer-1 responses with misprediction rollback, the
Layer-2 weight and threshold storage, the popcount-based ternary inner
product, and the logic that selects between the helper and the baseline
prediction.

## How inference is reduced to lookups and bit logic

**Input encoding.** Each conditional branch in the history is turned into a
p-bit index by appending its direction bit to the p-1 low bits of its
instruction pointer:

    idx = ((IP << 1) + dir) mod 2^p        (p = 8)

The trained network sees a history as a matrix of 1-hot columns selected by
this index. For example IP 0x400587 gives index 14 when not taken and 15
when taken; 0x40062a gives 84/85, 0x4005cd gives 154/155 and 0x400634 gives
104/105.

**Layer 1 becomes a table.** The inner product of a filter with a 1-hot
column is just the filter weight at the hot index. After training, that
weight goes through the learned normalization and is quantized to a ternary
value, so the whole first layer can be precomputed into a table `T` of
2^p rows with one 2-bit code per filter (`cnn_l1_table`). The offline rule
for filter j with normalization (μ, σ, γ, β) and quantization bin q is

    T[i,j] = 01 (-1)  if w_ij < -β·σ/γ + μ - q
             11 (+1)  if w_ij > -β·σ/γ + μ + q
             00 ( 0)  otherwise

with q = 0.8 in the published setup. This rule runs offline; the hardware
only stores its result.

**Layer 1 is evaluated ahead of time.** Because the filters are one
position wide, the response of a history position depends only on that
branch, so it is looked up as soon as the branch is fetched and shifted
into a FIFO (`cnn_l1_fifo`):

    L1 <- (L1 << 2m) | T[idx]

When the H2P is later fetched, all Layer-1 outputs are already waiting.

**Layer 2 is a ternary inner product.** With codes split into sign bits S
and value bits V, the product of two codes is non-zero when both V bits are
set and positive when the S bits are equal, so

    s = S_L1 xor S_L2,   v = V_L1 and V_L2
    P = popcount(~s & v) - popcount(s & v)
    predict taken  <=>  P > t

where the integer threshold t is the final normalization folded in offline
(`cnn_predict`, `popcount`). No multiplier or table lookup is on the
prediction path; the critical path is the 6400-bit popcount.

### Code format and bit layout

| code `{sign,value}` | meaning |
|---|---|
| `00` | 0 |
| `01` | -1 |
| `11` | +1 |
| `10` | 0 (value bit clear) |

A 2m-bit row or FIFO entry holds filter j in bits `[2j+1:2j]`. The FIFO
window and the Layer-2 weight vector share one layout: slot 0 (the least
significant 2m bits) is the most recent branch, slot HIST_LEN-1 the oldest.
A plot that numbers history positions 1..200 with 200 the most recent maps
position k to slot 200-k.

## Module structure

    cnn_helper                      top: one helper for one H2P
    ├── cnn_l1_table                ⟨IP, dir⟩ hash + 2^p x 2m-bit Layer-1 response table
    ├── cnn_l1_fifo                 (HIST_LEN + MAX_ROLLBACK) x 2m-bit shift buffer
    ├── cnn_l2_store                HIST_LEN x 2m-bit Layer-2 weights + threshold
    └── cnn_predict                 ternary inner product, P > t
        └── popcount (x2)           adder tree over 8-bit leaves
    cnn_pkg                         default sizes, ternary code enum, upload targets

| Parameter | Default | Meaning |
|---|---|---|
| `P_BITS` | 8 | index bits p (7 IP bits + direction) |
| `NUM_FILTERS` | 32 | Layer-1 filters m |
| `HIST_LEN` | 200 | global history length |
| `THRESH_W` | 64 | threshold register width |
| `IP_W` | 64 | instruction pointer width |
| `MAX_ROLLBACK` | 32 | wrong-path entries that can be removed exactly |

Storage per helper at the defaults: table 2,048 B + FIFO window 1,600 B +
Layer-2 weights 1,600 B + threshold 8 B = 5,256 B, plus 256 B of rollback
reserve in the FIFO. With m = 2 the same formula gives 336 B.

## Interface of `cnn_helper`

| Port | Dir | Meaning |
|---|---|---|
| `br_valid, br_ip, br_dir` | in | a conditional branch was fetched and its direction predicted; push its Layer-1 row |
| `rb_count` | in | after a misprediction: number of wrong-path branches to discard (0 = none) |
| `fetch_valid, fetch_ip, base_pred` | in | a branch needs a prediction; `base_pred` is the baseline predictor's |
| `cfg_valid, cfg_target, cfg_addr, cfg_data` | in | upload port, see below |
| `pred_valid` | out | one cycle after `fetch_valid` |
| `pred_taken` | out | final prediction: the CNN's for the H2P, else `base_pred` |
| `pred_from_cnn` | out | the helper made this prediction |
| `cnn_score` | out | signed P of the last H2P prediction |

Upload targets (`cnn_pkg::cfg_target_e`): `CFG_L1_ROW` writes table row
`cfg_addr`; `CFG_L2_SLOT` writes the Layer-2 weights of history slot
`cfg_addr`; `CFG_THRESHOLD` writes t (signed); `CFG_H2P_IP` writes the IP
of the H2P and switches the helper on. Until an H2P IP is uploaded, every
prediction is the baseline one. The L1 table is not reset and must be
fully written before use; everything else resets to zero (`rst_n`,
synchronous, active low).

### Timing

* A push, a rollback and an upload take effect at the next rising edge.
  When both happen in one cycle, the rollback is applied first and the push
  is the first correct-path branch.
* The prediction is registered: `pred_*` are valid exactly one cycle after
  `fetch_valid`. A fetch in the same cycle as a push sees the history
  without that branch, so the H2P itself should be pushed with `br_valid`
  when (or after) it is predicted, like any other branch.
* The table read and the inner product are combinational.

### Rollback

After a misprediction the wrong-path branches must leave the history. The
FIFO keeps `MAX_ROLLBACK` entries beyond the visible window, so removing
k ≤ 32 entries in one cycle restores exactly the k older entries that had
been pushed out of the window. A deeper rollback than the reserve shifts in
zero codes, which contribute nothing to P; an assertion flags `rb_count`
above `MAX_ROLLBACK`.

## Where this RTL departs from or adds to the source description

Taken from the design as published: the index hash, the table and its
2-bit codes, the FIFO update rule, the ternary inner product with two
popcounts and a subtraction, the compare with a precomputed threshold, the
storage items and their sizes, and rollback by shifting wrong-path entries
off the FIFO.

Choices made here, where the description is silent or ambiguous:

* **Sign combination.** The published inner-product formula writes the
  sign combination with the symbol for logical AND, and its pseudo-code
  version counts `~(s & v)` in the first popcount. Read literally, both
  give wrong products (−1·+1 would count as +1, zero products would count).
  The RTL uses XOR for the signs and `~s & v` for the positive count, the
  only reading that yields an inner product.
* **Code bit order.** The table rule gives the codes 01, 11, 00 without
  naming the bits; the left bit is taken as sign, the right as value.
* **Threshold width.** 64 bits, the size implied by the published storage
  total of 336 bytes for p = 8, m = 2, history 200.
* **Rollback reserve** of 32 entries and single-cycle rollback.
* **H2P detection** by an exact compare of the full IP with an uploaded
  register, and simple override of the baseline prediction.
* **Upload port**, reset behaviour, one-cycle prediction latency and a
  combinational table read.
* **Popcount structure**: a binary adder tree over 8-bit leaves (10 adder
  levels for 6400 bits); the published design only cites a 13–15 stage
  popcount circuit.
* One helper per instance. A prediction unit that serves several H2Ps
  instantiates several helpers, each fed the same branch stream.

Not part of the RTL: the baseline predictor (TAGE-SC-L), the CPU logic that
detects mispredictions, and offline training. The trained networks of the
published experiments are not available, so no published weights are
included.

## Verification

Each module has a self-checking testbench in `tb/` that compares against an
independent model and ends with a `TB_RESULT checks=N failures=M` line:

| Testbench | What it checks |
|---|---|
| `tb_cnn_l1_table` | upload of all 256 rows; reads by ⟨IP, dir⟩ checked against the example index pairs above and against 64-bit arithmetic on random IPs; random rewrites |
| `tb_cnn_l1_fifo` | random push/rollback traffic against a reference queue, incl. maximum rollback, rollback with push, restoring evicted entries |
| `tb_cnn_l2_store` | reset, per-slot writes, ignored out-of-range writes, signed threshold |
| `tb_popcount` | 6400-bit and 13-bit (exhaustive) vectors |
| `tb_cnn_predict` | score and prediction against a signed-integer model, P = t boundary, extremes ±6400, one-cycle latency |
| `tb_cnn_helper` | whole helper at the default size, see below |
| `tb_h2p1_two_filter` | a two-filter helper (336 bytes of state) on the example program with loop trip counts 0–14; every prediction checked against the model, accuracy reported (about 90% with the hand-built weights, since stale copies of the correlated branch then reach the weighted positions) |

`tb_cnn_helper` runs three phases at full size. First, with no helper
installed, the baseline prediction must pass through. Second, it replays a
small program in which the H2P (IP 0x400634) repeats the direction of an
earlier branch (0x400587, taken one time in three) separated by a loop of
10–14 iterations, so the predictive branch lands at a different position
every time. The uploaded network is a hand-built ternary equivalent of a
trained one: filter 0 fires on ⟨0x400587, not taken⟩, filter 1 on
⟨0x400587, taken⟩, Layer-2 weights are −1 and +1 on those filters over the
30 most recent positions, t = 0, and the 30 other filters carry random
codes with zero Layer-2 weight. All 150 H2P predictions follow the
correlated branch. Third, random tables, weights and thresholds with random
traffic, rollbacks and fetches. Every output is compared with a reference
model, and each mechanism (push, window overflow, rollback, rollback that
restores evicted entries, rollback with push, override, pass-through, both
CNN directions, fetch with push, each upload target) must occur.

Simulate with plain Verilator, for example:

    verilator --binary --timing --assert -Irtl -y rtl rtl/cnn_pkg.sv \
        tb/tb_cnn_helper.sv --top-module tb_cnn_helper -Mdir obj
    ./obj/Vtb_cnn_helper

The full-size end-to-end test builds and runs in well under a minute.
