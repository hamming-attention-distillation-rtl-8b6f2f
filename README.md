# A binary-key attention head with top-N sparsity

Self-attention costs O(n²) in the context length n. Both parts of that cost
are the target here: the score matrix Q·Kᵀ, and the softmax and A·V that follow
it. This head uses two ideas from Hamming Attention Distillation (HAD), a
fine-tuning method:

1. **Binary queries and keys.** Q and K are replaced by their signs. A dot
   product of two ±1 vectors of length d is `2·(agreeing bits) − d`, so a score
   is an XNOR followed by a population count. The keys can then sit in a
   content-addressable memory (CAM) that scores every key against the query at
   once.
2. **Top-N sparsity.** Only the N largest scores of each query row are kept.
   Scaling, softmax and the weighted sum of value rows are done for those N
   entries only, so each query row reads just N value rows. V stays at full
   precision (bfloat16 here).

The RTL implements one attention head for one query row at a time:

```
 Q (bf16) ─► binarize ─► query register ─┐
                                          ▼
 K (bf16) ─► binarize ─► key CAM ── score of every key (±1 dot products)
                                          │ one score per cycle
                                          ▼
                                     top-N list ── N (score, key index), sorted
                                          ▼
                          scale and mask (logit_scale)
                                          ▼
                                  softmax_unit ── N probabilities (Q16)
                                          ▼
 V (bf16) ─► v_buffer ◄── reads row idx_j ── av_unit ──► output (bf16, DK wide)
```

The order of the stages is Binarize, MatMul (Q·K), TopK, Scale, Mask
(optional), SoftMax, MatMul (·V). This follows the method's block diagram and
its equations:

```
A_l = sign(Q_c) · sign(K_c)ᵀ
A   = softmax( topn(A_l, N) / sqrt(d_k) )
out = A · V
```

The default size is the head used in the method's area and power comparison:
d_k = 1024, 256 keys and N = 30, so Q·Kᵀ is (1×1024)·(1024×256) and A·V is
(1×256)·(256×1024).

## Files

| file | block |
|---|---|
| `rtl/had_pkg.sv` | shared sizes, `bf16_t`, the exp2, fp32 and bf16 helper functions |
| `rtl/binarize.sv` | sign of LANES bfloat16 elements |
| `rtl/key_cam.sv` | binary key store; scores all keys in one search |
| `rtl/topn_select.sv` | streaming sorted top-N list |
| `rtl/logit_scale.sv` | drops masked or unused entries; forms base-2 softmax exponents |
| `rtl/softmax_unit.sv` | sequential softmax (exp2, sum, reciprocal, normalise) |
| `rtl/v_buffer.sv` | value memory, LANES elements per word |
| `rtl/av_unit.sv` | sparse probability × value accumulation, LANES lanes |
| `rtl/had_attention_top.sv` | the head: the blocks above plus the controller |
| `tb/tb_*.sv` | one self-checking testbench per block, plus `tb_had_workloads` |

## Parameters

| parameter | default | meaning |
|---|---|---|
| `DK` | 1024 | head dimension d_k: bits per key, elements per value row |
| `CTX` | 256 | keys and value rows held (the longest context) |
| `N` | 30 | the most logits kept per query row |
| `LANES` | 64 | elements per load word and per A·V cycle (this design's choice) |

`DK` must be a multiple of `LANES`. `CTX` should be a power of two, because key
indices are `log2(CTX)` bits wide and are not range-checked. `N` must be at
least 2.

## Using the head

**Loading.** Load only while `busy` is low. Each port writes `LANES`
bfloat16 elements per cycle to lane group `*_grp`:

- `q_wr_*` writes the query. Its elements are binarized on the way in and kept
  as DK bits.
- `k_wr_*` writes row `k_wr_row` of K. It is also binarized on the way in, so
  the CAM stores one bit per element.
- `v_wr_*` writes row `v_wr_row` of V, stored as bfloat16.

Loading all of K and V takes `CTX·DK/LANES` cycles (4096 at the defaults). The
K and V ports can be used in the same cycle.

**Running one query row.** Pulse `start` for one cycle. Four settings are
sampled with it:

| input | meaning |
|---|---|
| `cfg_len` | keys in use, 1..CTX. Keys 0..cfg_len−1 take part. |
| `cfg_topn` | entries kept, 1..N |
| `cfg_scale` | log2(e)/√d_k in Q16 (see below) |
| `cfg_mask_en` | if set, `key_mask` (also sampled at start) removes keys: bit i = 1 masks key i |

The result comes out as DK/LANES groups on `out_valid`/`out_grp`/`out_data`, in
order. `done` pulses with the last group. `topn_evict` pulses whenever the full
top-N list drops a candidate. Assertions in the top check three rules:

- `start` is given only when the head is idle;
- the settings are in range;
- nothing is loaded while `busy` is high.

**Cycle count.** `done` rises this many cycles after the edge that takes
`start`:

```
cfg_len + 2·N + (DK/LANES)·cfg_topn + 39
```

That is 835 cycles at the defaults (256 keys, top 30). The terms are:

- `cfg_len`: streaming the scores into the top-N list, one per cycle;
- `2·N + 33`: the softmax;
- `(DK/LANES)·cfg_topn`: the A·V accumulation, one value word per cycle;
- the rest is handshakes between the stages.

One query row is handled at a time. The stages do not overlap across rows.

**Smaller heads.** The models the method was tested on (BERT-base, DeiT and
T5-base) have d_k = 64. To run such a head, zero-pad Q, K and V to DK
elements and set `cfg_scale = had_pkg::scale_q16(64)` (11819). Zero padding
binarizes to +1 in both Q and K. Every score then gains the same constant, so
the top-N choice and the softmax do not change. The padded columns of the
output are zero.

## Inside the blocks

### Key CAM (`key_cam`)

Each of the CTX rows holds DK key bits. A search computes, for every row at
once, `2·popcount(~(key ^ query)) − DK` and registers it. The result is the
signed ±1 dot product, in the range [−DK, DK], `log2(DK)+2` bits wide.
`scores_valid` follows `search` by one cycle.

The method does this with a *capacitive* CAM: the agreeing cells of a row add
up as charge on its match line. That analog circuit is not described in enough
detail to model. This block computes the same numbers with digital XNOR and
adder trees, one per row.

### Top-N list (`topn_select`)

The scores enter in key order, one per cycle. The list holds N (score, index)
entries sorted largest first. Each cycle, every entry compares itself with the
new score in parallel:

- an entry with a greater or equal score stays where it is;
- the first entry below those takes the new score;
- every entry after that moves down one place, and the last one falls out.

Because keys arrive in ascending order, **ties go to the lower key index**. The
method does not say how ties are ranked. They are common: with 1024-bit keys,
scores come in steps of 2.

### Scale and mask (`logit_scale`)

An entry is dropped if any of these holds:

- it is empty (fewer keys than N);
- its position is `cfg_topn` or beyond;
- it is masked.

Since the list is sorted, the first surviving entry has the largest score
`s_max`. Each survivor then gets a base-2 exponent:

```
t = (s_max − s) · log2(e)/√d_k        (unsigned, 16 fraction bits)
```

Subtracting `s_max` does not change the softmax but keeps the exponentials in
[0, 1]. Using base 2 turns the 1/√d_k scale and the change of base into one
multiply by `cfg_scale`. The mask comes after top-N, as in the method's
diagram. A masked key therefore still takes one of the N places.

### Softmax (`softmax_unit`)

One exp2 evaluator, one divider and one multiplier serve all entries, one entry
per cycle, in three steps:

1. `w = 2^(−t)` in Q16 (1.0 = 65536). The fractional part of t selects one of
   16 segments. Between the knots `round(65536·2^(−i/16))` the value is
   interpolated linearly (error below 0.03 %). The integer part of t becomes a
   right shift. While adding up the weights, dropped entries count as 0.
2. `R = ⌊2³²/Σw⌋` by restoring division, one quotient bit per cycle (33
   cycles). Σw ≥ 65536 whenever an entry survives, because the largest entry
   has w = 1.0.
3. `p = (w·R) >> 16`, the probability in Q16.

If every entry is dropped, all probabilities are 0 and so is the output.

### Sparse A·V (`av_unit`, `v_buffer`)

For each lane group g of the output, the unit walks the kept entries j:

1. It reads word `V[idx_j][g]` from the value buffer (synchronous read, one
   cycle).
2. It multiplies each bfloat16 element by `p_j`: the 8-bit significand times
   the 17-bit probability.
3. It adds each product to an fp32 accumulator per lane.

After the last entry of the group it rounds the lanes to bfloat16 (nearest
even) and emits them.

The fp32 accumulator has no denormals (they flush to zero), and its adds
truncate. The probabilities sum to about 1 and there are at most N terms. The
output's error is therefore dominated by the final rounding to bfloat16.
Infinities and NaNs in V are not handled.

## Where this follows the method and where it does not

Taken from the method:

- sign binarization of Q and K only;
- ±1 dot products in an associative memory;
- top-N selection before scaling and softmax;
- the 1/√d_k scale;
- the optional mask placed between Scale and SoftMax;
- sparse accumulation over full-precision V;
- the default sizes (d_k 1024, 256 keys, N = 30);
- N adjusted at run time, as the method does when it scales N with context
  length (15 at 128 tokens up to 120 at 1024).

This design's own choices:

- all number formats: bfloat16 inputs and outputs, Q16 probabilities, fp32
  accumulation, base-2 softmax with a piecewise-linear exp2;
- sign(0) = +1;
- lower index wins a tie;
- streaming the scores into the top-N list one per cycle;
- the sequential softmax;
- LANES = 64;
- the load ports, the controller and all timing;
- the scale as a run-time input.

Departures and limits:

- The capacitive CAM is replaced by its digital equivalent. Area and power
  figures for the analog array do not carry over.
- The scan into the top-N list takes `cfg_len` cycles per query row, so the
  cost still grows with context length. A parallel top-N over the CAM outputs
  would remove this. The method gives no circuit for it.
- The softmax and A·V reach about 1 % relative accuracy (bfloat16 output). They
  are not bit-exact with a floating-point softmax.
- Query rows are processed one after another; there is no pipelining between
  rows.

## Sizes that fit

At the default parameters the head runs:

- the area/power head (d_k 1024, 256 keys, N 30);
- BERT-base on GLUE (256 tokens, N 30);
- DeiT on ImageNet (197 tokens, N 30);
- T5-base on QuALITY at 128 tokens (N 15) and at 256 tokens (N 30).

The 64-dimensional heads run zero-padded. The QuALITY runs at 512 and 1024
tokens (N = 60 and 120) need `CTX = 512, N = 60` or `CTX = 1024, N = 120`.
That is a parameter change only. Such sizes have not been simulated here.

## Verification

Each testbench checks its block against a reference written independently in
the testbench, mostly in real arithmetic:

| testbench | checks |
|---|---|
| `tb_binarize` | signs of random, zero, −0 and denormal inputs |
| `tb_key_cam` | every row's score against a bit-by-bit ±1 dot product; `scores_valid` timing |
| `tb_topn_select` | list contents against a stable selection (lower index on ties); eviction count |
| `tb_logit_scale` | keep flags and exponents for d_k = 1024 and 64 |
| `tb_softmax_unit` | probabilities within 0.002 of 2^(−t)/Σ; latency 2N+33 |
| `tb_v_buffer` | random write and read-back with one-cycle latency |
| `tb_av_unit` | outputs against Σ p·V in real arithmetic; group order; latency |
| `tb_had_attention_top` | end to end at the default size (see below) |
| `tb_had_workloads` | one query row of each evaluated setting, at the default size |

`tb_had_attention_top` runs five query rows. Between them they exercise:

- top-N evictions;
- masking, including masked keys inside the top N;
- a shorter context with N = 15;
- fewer keys than N;
- a reloaded query.

It also checks the cycle count of each row. Both end-to-end testbenches use
no parameter overrides. Each one simulates in under a second, after a Verilator
build of about a minute.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_had_attention_top \
    -Irtl -Itb -y rtl -y tb +libext+.sv rtl/had_pkg.sv tb/tb_util_pkg.sv \
    tb/tb_had_attention_top.sv
./obj_dir/Vtb_had_attention_top
```

Each testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. A
watchdog counts a failure if a testbench hangs.
