# A KV-token-granular last-level cache for dynamic sparse attention

## The problem

In dynamic sparse attention (DSA), the decoder's query for each new token does
not attend to the whole KV cache. A small "lightning indexer" first scores every
cached token. Only the `k` best-scoring tokens (the top-k set, k = 64 to 256) are
then gathered from the KV cache and passed to scaled dot-product attention
(SDPA). The bandwidth per step is fixed, but the access pattern is not friendly:

* the selected tokens are scattered over the whole context, so page-sized
  prefetching brings in mostly unused data;
* the set changes quickly: in the measured traces more than half of the
  top-k set is new at every decode step, and a token stays selected for fewer
  than two steps on average;
* over 50 consecutive steps one layer of one request still touches about 5x k
  distinct tokens (7.2x k at the 95th percentile), so there is reuse, but
  only over a window of tens of steps.

A conventional last-level cache (the GPU L2) gets almost no hits from this. Each
layer and each step fills it with a new scattered subset, and every miss costs a
DRAM (HBM) access of roughly 200 ns on the critical path.

The remedy implemented here is to set aside part of the last-level cache for KV
tokens. That part is managed **fully associatively at the granularity of one KV
token**, with exact **least-recently-used** replacement, so a token picked in one
decode step stays on chip for the following steps, of any layer and any request
in the batch, until older tokens have been evicted. The reserved part holds a
few thousand tokens, so a fully associative lookup and an LRU search of 10-20
cycles are affordable. That is still an order of magnitude cheaper than a miss
to HBM.

The RTL covers the path of one decode step from the indexer to the SDPA input:

```
 indexer keys k_s ─▶ lightning_indexer ─▶ topk_select ─▶ topk_gather
                                                            │ lookup {tenant, layer, pos}
                                                            ▼
                                                       kv_lru_tags
                                             hit ┌──────────┴──────────┐ miss (slot chosen,
                                                 ▼                     ▼  victim evicted)
                                          kv_data_store ◀── fill ── kv_miss_handler ◀─▶ HBM port
                                                 │                     │ (forward)
                                                 └──────▶ SDPA port ◀──┘
```

The top level is `dsa_kv_llc_top`. HBM, the SDPA compute, the linear projections
that produce the indexer's inputs, and the rest of the last-level cache are
outside it and appear as ports.

## The token-level LRU (`kv_lru_tags`)

This block is the heart of the design and the least obvious part.

**What a slot holds.** Each of the `N` slots (default 5120) has a valid bit,
a 26-bit tag and a 32-bit time stamp. The tag is the token's full name,
`{tenant[2:0], layer[6:0], pos[15:0]}`. A tenant is one request of the decode
batch. Because the tag names the tenant and the layer, tokens of all requests
and layers share one pool, and a slot is never tied to an address range. That
is what "fully associative at token granularity" means here. The time stamp is
the value of a global lookup counter at the slot's last use. Comparing stamps
therefore gives the exact LRU order, with no approximate tree-PLRU state.

**Lookup sequence.** One lookup runs at a time:

| cycle | state  | action |
|-------|--------|--------|
| 0     | IDLE   | accept `req_tag` (`req_valid && req_ready`) |
| 1     | CMP    | compare the tag with all N slots in parallel; a hit rewrites that slot's stamp |
| 2     | –      | **hit** answer: `resp_valid`, `resp_hit`, `resp_slot` |
| 2..15 | SEARCH | **miss**: wait for the victim search (below) |
| 16    | –      | **miss** answer: the victim slot gets the new tag and stamp; `resp_evict`/`resp_evict_tag` say which token was dropped |

A miss takes `3 + ceil(log2 N)` cycles from acceptance to answer. That is 16 at
the default size, inside the 10-20 cycles the architecture allows for
evaluation and eviction.

**Victim search.** Every slot presents the key `{valid, stamp}`. The smallest
key belongs to an empty slot if there is one (the oldest empty slot first),
and otherwise to the least recently used slot. A binary tree of comparators
finds the smallest key, with one register stage per tree level. On a tie the
lower slot number wins. The tree runs every cycle, but its root is read only
after `ceil(log2 N)` cycles in SEARCH. No stamp or valid bit changes while a
lookup is in flight, so the root is exact by then. Slots at or above
`cfg_slots` present an all-ones key and can never be chosen.

**Reservation size and bypass.** `cfg_slots` (0..N) is the number of tokens
actually reserved, which is the size of the LL-cache partition set aside.
Slots at or above it neither hit nor get filled. With `cfg_slots = 0` every
lookup answers at once as a miss with `resp_bypass` set. The token then comes
from HBM and goes to SDPA without being stored, which is the behaviour of a
machine with no reservation. `flush` clears all valid bits. Change
`cfg_slots` and raise `flush` only while the cache is idle, and flush after
shrinking the reservation if tokens above the new limit must not come back
when it grows again.

**Known limit.** The 32-bit stamp wraps after 2^32 lookups. After a wrap, newly
used slots look older than slots that have not been touched since the wrap,
so for one round the replacement order is not LRU. The contents stay correct.
Widen `STAMP_W` if that matters.

An assertion checks that no token is ever present in two slots.

## Scoring and selection (`lightning_indexer`, `topk_select`)

The indexer scores context token `s` against the current query as

    S_s = Σ_{j=1..4} w_j · max(0, q_j · k_s)

with 4 heads and 64-element vectors. `q_j` and `w_j` come from the current
token's hidden state and stay fixed during a step. The keys `k_s` are read from
the indexer's own key cache and stream in one per cycle. The unit computes 4
dot products of 64 signed 8-bit products in one stage and the ReLU, weighting
and sum in a second, so each score leaves 2 cycles after its key. The first key
may arrive in the same cycle as `start`.

`topk_select` keeps the 256 best (score, position) pairs in a register list
sorted by score. Each new pair is inserted in one cycle: every entry compares
itself with the new score in parallel, the entries below the insertion point
shift down, and the last entry falls off. The first `k` entries of the list are
then the top-k set for any `k` up to 256, so `cfg_k` chooses k at run time.
Equal scores keep arrival order. `done` pulses one cycle after the last score.

## Gather, fill and the data array

`topk_gather` walks the selected positions, best first, and asks the LRU about
each token.

* On a **hit** it reads the token's 64 beats of 512 bits (4 KiB, one layer's K
  and V for one position) from `kv_data_store`, one beat per cycle.
* On a **miss** it hands the tag and the slot the LRU chose to
  `kv_miss_handler`. That block issues one HBM read for the whole token at
  `cfg_kv_base + tag × 4096` and writes the returning beats into the slot. It
  forwards each beat to SDPA in the same cycle.

Every beat leaves on `sdpa_data` with the token position. `sdpa_tok_last`
marks a token's last beat and `sdpa_step_last` the last beat of the step.

Tokens are handled strictly one after another. A slot being read therefore
cannot be evicted under the reader. The cost is that misses are not
overlapped.

Per token at default sizes:

* a hit costs 68 cycles (4 of lookup and hand-over, then 64 beats);
* a miss costs about 290 cycles with a 200-cycle HBM: 21 for lookup, LRU
  search and request, 200 of HBM latency, and 64 beats plus a few cycles of
  pipeline.

A step with T context tokens and k selected takes about `T + 4` cycles of
indexing plus the sum over the k tokens. The end-to-end test checks data and
counts, not these totals. The unit tests check the per-block latencies
(2/16-cycle LRU answers, `1 + k·(NBEAT+4)` cycles for an all-hit step,
`LAT + 3` for the first fill beat).

`kv_data_store` is the reserved partition's storage: `SLOTS × NBEAT` words of
512 bits, with one write port and one read port. The read data is registered
(one cycle). At the default size it is 20 MiB. On a real chip this is part of
the existing L2/L3 SRAM, so the array here stands for that SRAM rather than for
a new memory.

## Using the top level

1. While `busy` is low, set `cfg_slots` (reserved tokens), `cfg_k` and
   `cfg_kv_base`, and optionally pulse `flush`.
2. Pulse `step_start` with `step_tenant`, `step_layer`, `q` (4×64 signed bytes)
   and `w` (4 signed bytes). Keep them stable until `step_done`.
3. Stream the step's indexer keys on `k_valid`/`k` (gaps allowed) and raise
   `k_last` on the last one.
4. Take the selected tokens' K/V beats from `sdpa_*` until `sdpa_step_last`.
   `step_done` pulses in the same cycle. The SDPA side must accept one beat
   per cycle.
5. Serve HBM requests on `hbm_req_*`. One request is outstanding at a time,
   it reads a whole token, and the response beats come back in order. Beats
   cannot be stalled once they start.

`evict_valid`/`evict_tag` announce each token that leaves the reserved
partition. `cnt_hit`, `cnt_miss`, `cnt_bypass` and `cnt_evict` count lookups by
outcome and evictions since reset. Together with the HBM latency, these
counters are what a slowdown estimate for the reservation is built from.

## Parameters and where their values come from

| parameter | default | origin |
|---|---|---|
| indexer heads `H`, dimension `D` | 4, 64 | the DSA indexer configuration the design was characterised with |
| `TOPK_MAX` | 256 | largest k evaluated (64, 128, 256) |
| tenants, layers, positions | 3, 7, 16 bits | batch of 8, up to 128 layers (80 for LLaMA-3.1-70B), 64k context |
| `LL_SLOTS` | 5120 | 20 MiB reservation (largest evaluated) / 4 KiB per token |
| `TOKEN_BYTES` | 4096 | LLaMA-3.1-70B: K and V, 8 KV heads × 128 dims × 2 bytes; this design's assumption |
| `BUS_W`, `BEATS` | 512, 64 | this design's choice |
| `STAMP_W` | 32 | this design's choice |
| q/k/w element width | 8 bits | this design's choice (the characterised model ran in BF16) |
| HBM latency in the testbenches | 200 cycles | ~200 ns per access at 1 GHz |

Smaller reservations (the 5, 10 and 15 MB points, i.e. 1280, 2560 and 3840
tokens) need no rebuild: set `cfg_slots`.

## How the configurations that were studied fit

* **Reservation sizes 0-20 MB, top-k 64/128/256, prompts of 500-1500 tokens plus
  200 generated, batch 8 with 64k context, and the 1B-70B LLaMA backbones** all
  fit at the default parameters. Some use run-time settings (`cfg_slots`,
  `cfg_k`). The 1B model's 2 KiB tokens use half a slot each.
* **The full working set does not fit, by design.** At top-k 128 one layer of
  one request touches up to 922 tokens per 50 steps (P95). With 20 layers per
  GPU and 8 requests that is about 147,000 tokens against 5120 slots. The
  reservation catches the reuse that happens within a short window, not the
  whole working set. That is why a slowdown remains (about 1.15× at 20 MB in the
  roofline estimate the design is based on).

**Reuse distance decides what the reservation can catch.** Under exact LRU, a
token selected again by the same layer of the same request in the next step
hits only if fewer than `cfg_slots` other distinct tokens were looked up in
between. If the batch is decoded layer by layer and request by request, the
number of lookups in between is roughly `layers × requests × k`. For the
setup above that is 20 × 8 × 128 = 20,480, which is more than the 5120 slots.
Reuse from one step to the next is then lost, and only reuse within a step
or among neighbouring streams is caught.
`tb_reservation_sweep` shows the same effect at small scale. With 4
interleaved streams of 16 tokens (64 lookups per round), 32 slots give no hits
at all, while 64, 96 and 128 slots give 44%, 58% and 60% hits. The 32-slot
point is even about 4% slower than no reservation, because every miss pays
the 16-cycle LRU search. Sizing the reservation, or ordering the work (for
example, several decode steps of one layer back to back, where the serving
schedule allows it), matters as much as the replacement policy.

## Departures and omissions

* **Number format.** The indexer uses 8-bit fixed point with exact integer sums.
  The original characterisation used BF16. The dataflow and the formula are
  unchanged, but scores, and so top-k sets, may differ from a BF16
  implementation.
* **No coalescing of misses by KV page, and no batched HBM fetch.** Each missing
  token is one HBM read. A batch-fetch unit that sorts a step's misses by bank
  and issues them concurrently is a natural next step that this RTL does not
  attempt. So is merging misses that fall in the same KV page.
* **Sequential gather.** One token at a time. This keeps slot reuse safe
  without pinning, but HBM latency is not overlapped across the misses of a
  step.
* **Address map.** Tokens are placed densely by `{tenant, layer, pos}`. A paged
  KV layout would put a page-table translation in front of `kv_addr`.
* **Outside the design.** HBM, the SDPA compute, the projections that produce
  `q`, `w` and `k`, the indexer key cache, and the conventionally managed part
  of the LL cache. `tb/hbm_model.sv` is a behavioural stand-in for HBM used by
  the testbenches.

## Verification

Every block has a self-checking testbench that prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_lightning_indexer` | 200 random keys at full size against the score formula; positions, last flag, 2-cycle latency, ReLU cut-off |
| `tb_topk_select` | k = 64/128/256 over 1000 random, tie-heavy scores against a stable selection; `done` timing |
| `tb_kv_lru_tags` | 3000 lookups (16 slots) against an exact-LRU model: hit/miss, slot, evicted tag, 2/7-cycle answer times, reservation changes, bypass, flush |
| `tb_kv_data_store` | random read/write traffic against a shadow copy, read-during-write |
| `tb_kv_miss_handler` | HBM address, fill slot/beat, forwarded data and last flag, no writes in bypass, first-beat latency |
| `tb_topk_gather` | gather + LRU + store + miss path + HBM model: every SDPA beat, hit/miss/bypass events against an LRU model, all-hit step cycle count |
| `tb_dsa_kv_llc_top` | end to end at reduced size (k ≤ 16, 24 slots, 4 beats): 12 steps over tenants and layers, k switches, flush, bypass; every beat, the counters and each evicted tag against reference models; each mechanism must occur |
| `tb_reservation_sweep` | the reservation sweep (0/5/10/15/20 MB scaled to 0/32/64/96/128 slots) on one replayed 2-tenant x 2-layer x 8-step trace: all checks of the end-to-end test, hits non-decreasing with size and cycles non-increasing between non-zero sizes; prints hit rate and cycles per point |
| `tb_dsa_kv_llc_full` | the same end to end at full default size (5120 slots, 64-beat tokens, k = 64/128/256, 1000-token contexts), about 200,000 cycles, under a minute |

Each of these testbenches was also run against a deliberately broken copy of
its block and failed. The broken copies were: no ReLU, the wrong tie rule,
most-recent instead of least-recent victim, a wrong address formula, writes
during bypass, hits refetched from HBM, and a wrong eviction counter.

The reference models in the testbenches are written independently of the RTL:
plain loops for the scores, a selection sort for top-k, and a recency queue for
LRU. They agree with the RTL on every beat.

What is not verified: behaviour after a time-stamp wrap; synthesis timing of the
5120-way tag compare and the 13-level tree at a real clock rate; and any real
HBM protocol.

## Simulating

All files are SystemVerilog-2017. The package `rtl/dsa_pkg.sv` must come first.
For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -yrtl -ytb \
    --top-module tb_dsa_kv_llc_top \
    rtl/dsa_pkg.sv tb/tb_dsa_pkg.sv tb/tb_dsa_kv_llc_top.sv
./obj_dir/Vtb_dsa_kv_llc_top
```

Replace the top module and file to run another testbench. `tb/tb_dsa_pkg.sv` is
needed only by the testbenches that use the HBM model. The full-size test builds
in about 25 s and runs in about 40 s. To change sizes, override the top's
parameters (`KMAX`, `SLOTS`, `NBEAT`, `DW`). The indexer sizes and the tag field
widths live in `dsa_pkg`.
