# InstCSD: SparF attention inside a flash drive, in SystemVerilog

During decoding, a large language model reads the whole key/value (KV) cache of every
sequence at every step. The cache is much larger than the weights, so keeping it in GPU
memory limits the batch size. Streaming it from host memory or an SSD over PCIe makes
that link the bottleneck. This design takes another route. The KV cache lives in the
flash of a computational storage drive, and the decode-phase attention runs in logic
beside the flash channels. Per attention head, only the query `q` and the mean value
vector `vbar` go in over the host link, and only the 128-element head output comes back.

Flash channels give about 11.2 GB/s in total (8 channels of roughly 1.4 GB/s). That is
still little for dense attention, so the engine runs a sparse attention algorithm,
*SparF*. SparF reads only a fraction of K and V, and it is arranged so that it can still
read flash one 4 KB page at a time. This RTL implements the engine, the per-channel flash
controllers with their filters, the KV page layout, and the buffer that collects newly
generated tokens into pages.

## 1. SparF attention, as the hardware runs it

One request is one head of one sequence at one layer, with context length `S`. The
request also carries three sparsity settings:

- `r`: the number of hidden dims kept (16 of 128 by default);
- `k`: the number of tokens kept (256 of 2048 by default, a 1/8 ratio);
- `l`: a local window of most recent tokens that is always kept.

| step | what happens | where |
|---|---|---|
| 1 | top-`r` dims of `|q|` → hidden mask `i` | `argtopk`, fed by `sparf_engine` |
| 2 | fetch every hidden-indexed K page that holds a dim of `i`; skip the others | `sparf_engine` page walk, `kv_addr_map`, `nfc` |
| 3 | inside each NFC, drop the beats of dims not in `i` | `nfc_filter` |
| 4 | approximate scores `ŝ = softmax(q[i]·K[:,i] · y0)`, with `y0 = 1/sqrt(d·‖q[i]‖₁/‖q‖₁)` | `attention_kernel` #1, `rsqrt_unit` |
| 5–6 | top-`k` tokens of `ŝ + m`, where `m` is 1.0 for the last `l` tokens → token mask `j` | `argtopk` |
| 7 | `α = Σ_{t∈j} ŝ_t` | summed inside `argtopk`, divided in `sum_unit` |
| 8 | fetch every token-indexed K page holding a token of `j`, then the V pages | page walk, `nfc` |
| 9 | drop the beats of tokens not in `j` | `nfc_filter` |
| 10 | exact softmax over the selected tokens, with `y1 = 1/sqrt(128)` | `attention_kernel` #2 |
| 11 | `out = α · (s·V[j]) + (1−α) · vbar` | `attention_kernel` #2 accumulates `Σ w·V`; `sum_unit` normalises and blends |

Steps 2–3 and 8–9 together are the *dual-step loading*:

1. **Page level.** A page is read only if at least one unit in it is needed. The page
   walk tests the masks over the page's range of dims or tokens before it issues the read.
2. **Unit level.** The filter in the NFC discards the unneeded units of the pages that were
   read, so they never reach the engine.

The counters `st_pages_skipped` and `st_beats_dropped` count the two steps.

## 2. Where the KV cache lives in flash (the dual mapping)

A head's K or V vector for one token is 128 FP16 values, or 256 bytes. A 4 KB page holds
16 of them, so reading single tokens at random would waste 15/16 of each page. The design
therefore stores K twice and V once:

* **Token-indexed pages (K and V).** A page holds a *group* of 16 consecutive tokens of
  one head, token-major: 16 tokens × 128 dims = 2048 elements. Group `g` of every head is
  on channel `g mod 8`, so one head's groups spread over all channels. Within a channel,
  the heads of one group sit on consecutive pages.
* **Hidden-indexed pages (K only).** A page holds 4 hidden dims for 512 consecutive tokens,
  dim-major: 4 × 512 = 2048 elements. Hidden group `hg = dim/4` is on channel `hg mod 8`. A
  2048-token context therefore needs 4 such pages per hidden group.

`kv_addr_map` computes the channel and a linear page number ("row") inside that channel.
For sequence `s`, layer `L` and head `h`:

```
REGION = max(S_MAX/16/NCH, (D_HEAD/4/NCH) * (S_MAX/512)) * NHEADS        = 640 pages
row    = ((s * NLAYERS + L) * 3 + region) * REGION + in_region
 token-indexed K (region 0) or V (region 1):  ch = g mod NCH,   in_region = (g / NCH) * NHEADS + h
 hidden-indexed K (region 2):                 ch = hg mod NCH,  in_region = ((hg / NCH) * 4 + tc) * NHEADS + h
```

Here `g = tok/16` and `tc = tok/512`. Block and page-in-block are `row / 256` and
`row mod 256`. Each (sequence, layer) thus owns three equal regions in every channel.

Read data comes back as 32-byte beats of 16 elements. Each NFC keeps the command of every
outstanding read in a tag FIFO and labels each beat with what it holds (`beat_tag` in
`instinfer_pkg`):

* hidden-indexed beat `b`: dim `hid0 + b/32`, tokens `tok0 + 16·(b mod 32)` … `+15`;
* token-indexed beat `b`: token `tok0 + b/8`, dims `16·(b mod 8)` … `+15`.

The filter then needs to check just one mask bit per beat. It also drops beats of tokens
at or beyond `S`, so partly filled pages at the end of a context cost nothing downstream.

## 3. The engine's schedule

`sparf_engine` is one finite-state machine (FSM) that steps through the algorithm:

```
IDLE → TOPR (stream |q|, 128 cycles) → TOPR_WAIT (r-cycle read-out)
     → ISSUE_H (walk 32 hidden groups × 4 chunks) → WAIT_H (all issued pages done)
     → SM1 (kernel-1 softmax) → TOPK_WAIT (kernel 1 emits S scores into argtopk, k read-out)
     → ISSUE_K → WAIT_K → SM2 (kernel-2 softmax) → ISSUE_V → WAIT_V → SUM → IDLE
```

The page walk looks at one candidate page per cycle:

* it issues the read when the page is needed and that channel's NFC has queue space;
* it skips the page, at no cost, when the page is not needed.

A fetch phase ends when the NFCs have reported every issued page done (`page_done`). That
is the point where every beat of the phase has reached a kernel.

Beats from the 8 channels are merged round-robin (`beat_arbiter`), one per cycle. The
engine always accepts them: a kernel absorbs every beat in the cycle it arrives.

| beat kind | kernel | work per beat |
|---|---|---|
| hidden-indexed K | kernel 1 | 16 lane products `q[h]·K[t+i][h]` added to 16 token scores |
| token-indexed K | kernel 2 | the 16-lane dot product added to one token score |
| V | kernel 2 | 16 products `w[t]·V[t][h+i]` added to 16 accumulators |

The two kernels are identical. Which step a kernel runs is set only by the kind of beats
it receives.

Measured with the full-size testbench, at the default sizes, with a flash model that has a
200-cycle array read and one beat per 6 cycles per channel:

| head | cycles | at 285 MHz |
|---|---|---|
| 2048-token context, r = 16, k = 256 | 36,126 | 127 µs |
| 1000 tokens | 17,808 | |
| 32 tokens | 4,910 | |

Flash bandwidth dominates. Most cycles are spent waiting for pages.

## 4. Number format and arithmetic

The paper's system computes in FP16. This RTL uses fixed point, so results are exactly
reproducible and the reference model in the testbench can match them bit for bit:

* **K, V, q and vbar: Q8.8.** A product of two Q8.8 values is Q.16, and scores are kept at
  40 bits.
* **Scaling.** `scaled = (score · y) >>> 23`, where `y` is U1.15, gives Q.8.
* **Exponent (`softmax_unit`).** `e = exp(scaled − max)` is U1.15. It is computed as `2^-z`
  with `z = (max − scaled) · log2(e)`:
  * a 64-entry table of `2^(-i/64)` covers the fractional part; it is built at elaboration
    by repeated multiplication with `2^(-1/64)` in Q30;
  * the integer part becomes a right shift;
  * results below `2^-16` are 0.

  The relative error is below 1.1 %.
* **Softmax passes.** Softmax takes two passes over the score memory: the maximum, then
  the exponentials. Each pass handles 16 tokens per cycle. Normalisation is deferred:
  kernels hold unnormalised weights, and `e_sum` is their total.
* **`y0` (`rsqrt_unit`).** A 16-step bit search for the largest `y` with
  `y² · 128 · ‖q[i]‖₁ ≤ ‖q‖₁ · 2^30`. `y1` is the same search with both norms equal to 1,
  which gives 2896 ≈ 2^15/√128.
* **`sum_unit`.** It uses one bit-serial divider twice:
  * `α = min(1, sel_sum · 2^15 / all_sum)`;
  * `inv = 2^46 / e_sel`;
  * then, one dim per cycle: `attn = (acc · inv) >>> 46` and
    `out = (α·attn + (1−α)·vbar) >>> 15`.

The alpha numerator is not computed in a separate pass. `argtopk` keeps a value next to
each candidate key and sums the values of the winners.

## 5. New tokens: the group buffer

Decoding produces one new K and V vector per head per step, but flash is written a page
at a time. `group_buffer` keeps, for each (sequence, layer, head) slot, the K and V
vectors of the current 16-token group. The GPU makes the new vectors of all heads of a
layer together, so the host appends heads 0 to 39 in order for each token. When the last
head's token `16n+15` arrives, the buffer writes the group for all 40 heads at once: 40 K
pages, then 40 V pages. Because heads are innermost in the mapping, these pages sit on
consecutive rows of one channel. This takes `2·40·(1+128)` cycles when the channel does
not stall. Appends wait while a flush runs, and a
flushed group is immediately readable by attention.

The slot is `(seq, layer, head) mod NSLOT`. The default `NSLOT = 40` covers the heads of one layer of one
sequence. Pairs that share a slot must not have groups open at the same time.

## 6. Modules

| module | role |
|---|---|
| `instinfer_pkg` | sizes, fixed-point types, page command and beat structs, `beat_tag` |
| `instcsd` | top: engine, group buffer, 8 × `nfc`, `beat_arbiter`; flash channels, request/response and append ports |
| `sparf_engine` | FSM of Algorithm 1, page walk, masks, statistics |
| `argtopk` | top-k by sorted insertion (k ≤ 256), mask read-out, sum of selected values |
| `attention_kernel` | score memory (2048 × 40 bit), 128 accumulators, 16 softmax lanes, one `gemv_unit` |
| `gemv_unit` | 16 signed multipliers and their sum |
| `softmax_unit` | one scaling + exponential lane |
| `rsqrt_unit` | temperature factor by bit search |
| `sum_unit`, `divider` | alpha, normalisation and blend; restoring divider |
| `nfc` | per-channel controller: 8 outstanding reads, beat tagging, filter, write pass-through (reads first) |
| `nfc_filter` | keeps strong beats, drops the rest |
| `kv_addr_map` | the dual page mapping above |
| `beat_arbiter` | round-robin merge of the channels' beat streams |
| `group_buffer` | decode-phase write buffer |

**Flash channel interface** (one per channel, all valid/ready):

* `f_cmd_{valid,ready,write,row}`: page read or program of linear page `row`;
* `f_rd_{valid,ready,data}`: read data returning in command order;
* `f_wr_{valid,ready,data}`: 128 beats following a program command.

The NAND command protocol, ECC and the rest of the flash translation layer belong to the
drive's controller and embedded processor, which are not part of this RTL.

**Host side:**

* `req_*` takes one head: sequence, layer, head, `S`, `r`, `k`, `l`, `q` and `vbar`;
* `resp_valid` pulses with `resp_out` and `resp_alpha`;
* `app_*` appends one token of one head.

## 7. Where this RTL departs from the paper

* **Fixed point instead of FP16** (section 4).
* **V is fetched after K.** In the paper, V pages load in parallel with K. Here they are
  fetched once the exact softmax of K is done, because kernel 2 needs the weights to
  absorb V beats and there is no V staging buffer.
* **Fixed kernel roles.** Kernel 1 always does the approximate scores and kernel 2 the
  exact attention. The paper schedules the two kernels by load.
* **Local window.** The local mask is read as "the last `l` tokens". The printed algorithm
  writes the condition as `i > S`.
* **Hidden-indexed page shape.** It is 4 dims × 512 tokens, following the text's 4 KB page
  with 2–8 dims. The mapping figure draws such a page with tokens 0…2047.
* **Group buffer.** It is an on-chip array, not drive DRAM. One flush covers a group of
  all heads of one layer (80 pages), not a whole flash block. It does not extend the
  hidden-indexed K copy for decode-phase tokens.
* **Tokens not yet flushed** (still in the group buffer) are not attended.
* **No prefill write path.** Prefill-phase KV writes are not modelled: the testbenches
  preload flash with both copies of K and with V.
* **Mapping in logic.** Address mapping is done in logic. In the paper's drive, the
  flash translation layer runs as software on the embedded processor.
* **Fewer multipliers.** The arithmetic is much narrower than the paper's FPGA build,
  which uses 768 DSP blocks: here there are 16 multipliers per kernel, plus 16 per
  softmax lane for scaling.

## 8. Sizes and what they cover

The defaults are those of OPT-13B with 1024 prompt and 1024 generated tokens:

| parameter | value |
|---|---|
| `D_HEAD` | 128 |
| `NHEADS` | 40 |
| `NLAYERS` | 40 |
| `S_MAX` | 2048 |
| `NSEQ` | 256 (largest batch) |
| `NCH` | 8 channels |
| page size | 4 KB |
| group | 16 tokens |
| `K_TOP` (largest `k`) | 256 |
| `R_TOP` | 16 |

This covers:

* batches of up to 256 sequences;
* any head split across several drives, since each request names its head.

It does not cover:

* contexts over 2048 tokens;
* `k > 256`, so not dense attention and not sparsity ratios above 1/8 at full length.

## 9. Simulation

Every testbench is self-checking. Each prints `TB_RESULT checks=N failures=M` and has a
cycle watchdog. `tb_kv_pkg` defines the whole KV cache as a hash of (sequence, layer,
head, K/V, token, dim), so no data files are needed. The same package holds:

* an independent inverse of the page mapping;
* a plain-loop reference of SparF in the same fixed-point format.

`flash_channel_model` is a behavioural channel: queued commands, 200-cycle read latency,
configurable beat gap, and written pages stored and checked.

| testbench | what it checks |
|---|---|
| `tb_instcsd` | full size, no parameter overrides: heads of 2048, 1000 and 32 tokens against the reference (output vector, alpha, both masks); group flush and read-back; counts page skips, filter drops, full flash queues, channel contention and local-window tokens |
| `tb_argtopk` | masks and sums against a selection loop, ties, latency `N + k + 1` |
| `tb_attention_kernel` | both passes against hand-computed scores, weights and accumulators; cycle counts |
| `tb_softmax_unit` | bit-exact against the reference and within 1.2 % of real `exp` |
| `tb_sum_unit` | alpha and outputs; latency `2·65 + 128 + 3` |
| `tb_gemv_unit`, `tb_nfc_filter`, `tb_kv_addr_map` | exhaustive random checks; the mapping is checked against its inverse and for collisions |
| `tb_nfc` | filtered beat stream, 8-deep read pipeline rate, read priority over writes, written page content |
| `tb_beat_arbiter` | no loss or reordering, round-robin fairness |
| `tb_group_buffer` | page addresses and every element of every flushed page, stalls, flush time |

To run one with Verilator 5, put the packages first:

```
verilator --binary --timing --assert rtl/instinfer_pkg.sv tb/tb_kv_pkg.sv \
    $(ls rtl/*.sv | grep -v _pkg) tb/flash_channel_model.sv tb/tb_instcsd.sv \
    --top-module tb_instcsd -j 8
./obj_dir/Vtb_instcsd
```

The full-size run takes a few seconds. A unit testbench needs only its module and the
modules below it.
