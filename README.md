# A fused relevancy-and-retrieval kernel for LLM memory processing

Long-context LLM inference techniques share one memory-processing pipeline. Sparse
attention (DeepSeek-style indexers, block-sparse attention with paged key
summaries) and retrieval-augmented generation (RAG) both run it. The pipeline has
four steps:

1. **Prepare memory.** Build compressed keys or a document index.
2. **Compute relevancy.** Score every memory entry against the current query.
3. **Retrieve.** Select the best entries.
4. **Apply.** Attend to, or concatenate, what was retrieved.

Steps 1 and 4 are dense linear algebra and suit a GPU. Steps 2 and 3 behave
differently. They are memory-bound and data-dependent: a top-k selection evicts
entries unpredictably, a max reduction depends on the data, and BM25 reads term
histograms in whatever order the postings come. On a GPU they grow to a large share
of decode time as the context grows.

This RTL implements the accelerator side of a GPU + FPGA split. The FPGA keeps
every compressed key in a three-level storage hierarchy. For each query it scores
all stored keys in one streaming pass and selects the best ones in the same pass.
Only the selected indices (and their scores) go back to the GPU. The same retriever
can be fed from a BM25 scorer instead of the inner-product path, which serves
lexical RAG. A second, smaller kernel serves recurrent "memory as context" models:
it turns each input segment into a query and blends the cached memory embeddings
by cross attention.

```
 key_in ─► key_loader ─► write_arbiter ─┬─► BRAM tier  tokens 0 … 16383
                                        ├─► URAM tier  tokens 16384 … 65535
                                        └─► HBM  tier  tokens ≥ 65536   (ports)
 q_in   ─► query_loader (64 heads, per-head weights)
 start  ─► read_arbiter (ascending token order, all tiers)
             └─► inner_product_engine ─► reduction_unit ─┐
 post_* ─► bm25_scorer ──────────────────────────────────┴─► topk_retriever ─► idx_*
```

Every arrow is a valid/ready stream. The modules are data-driven, so the pass runs
at the rate of the slowest stage.

## The key hierarchy

Keys are numbered in arrival order: the whole prompt at prefill, then one key per
decoded token. A key's token ID alone decides where it lives:

- tokens 0 to 16383 go to block RAM;
- tokens 16384 to 65535 go to UltraRAM;
- anything later goes to HBM.

Older tokens therefore sit in the fastest memory. No lookup table is needed, and
`write_arbiter` and `read_arbiter` both compute the tier from the token ID (see
`mp_pkg::tier_of`).

`key_loader` numbers incoming keys. After `MAX_TOKENS` (2^20) keys it raises a
sticky `overflow` flag and drops further keys. A host is expected to fall back to
GPU-only execution for such sequences. `clear` starts a new sequence.

`read_arbiter` scans tokens 0 to n−1 in ascending order, which has a useful
consequence. All on-chip reads (1-cycle latency) are issued before any HBM read, and
HBM answers arrive in order. So the key stream leaves in token order without a
reorder buffer. The arbiter issues a read only when the output FIFO has room:
occupancy plus reads in flight must be below `FIFO_DEPTH`. This is also the only
flow control towards HBM, whose read-response port has no ready signal.

The HBM tier is not modelled in `rtl/`. The kernel exposes a key-granular write
port and an in-order read port (`hbm_wr_*`, `hbm_rd_*`) for a memory controller.
`tb/hbm_model.sv` is a behavioural stand-in with a fixed latency and random stalls.

## Scoring: inner products, weighted sum, page max

`query_loader` takes the query as `HEADS` beats, one head of `DIM` signed 8-bit
elements plus a signed 8-bit head weight per beat. It refuses beats while a search
is running, so a search always sees one consistent query.

`inner_product_engine` computes `HP` = 16 head dot products per cycle. Each takes
128 multiply-accumulates, so one key takes `HEADS/HP` = 4 cycles. The full-size
test measures 4.0 cycles per key over a 65,792-key scan.

`reduction_unit` then forms the score of each key as Σ_h w_h · dot_h. This is the
weighted head average of a DeepSeek-style lightning indexer, without the division
by Σw, which does not change the ranking. For a single-query inner product, set one
weight to 1 and the rest to 0.

With `cfg.group_len` > 1, `group_len` consecutive keys form one retrieval unit, and
the unit scores as the maximum of its keys. This covers paged schemes in which a
page is represented by several vectors, such as a min vector and a max vector, or
several logical pages per physical page. The emitted index is then the unit number.

All arithmetic is exact integer arithmetic. Dot products are 24 bits wide and
scores 48 bits, so nothing saturates.

## Retrieval: the running top-k list

`topk_retriever` is the most intricate block. It holds `K_MAX` = 2048 slots of
(score, index, valid). The first `cfg.k` slots are used, where k is set per search.

A binary tree of comparators over all slots continuously yields the current
minimum slot. The tree's node rules, in priority order:

1. An unused slot never wins.
2. An empty slot always wins.
3. Otherwise the smaller score wins; on a tie, the left one.

An arriving score replaces the minimum slot if the list is not yet full or if the
score is strictly greater than the current minimum. The replacement and the tree's
re-evaluation happen in the same cycle, so the retriever accepts one score every
cycle. Its testbench checks that rate.

Equal scores do not evict, so among ties the earlier index is kept. After the last
score, the used slots are emitted in slot order, which is not sorted, and then
`done` pulses.

`cfg.sel_mode = SEL_THRESH` selects threshold mode instead. Every unit whose score is
strictly greater than `cfg.threshold` is emitted immediately, in scan order. `done`
follows once the last selected index has been taken.

The comparator tree for k = 2048 is the widest combinational path of the design:
11 levels of 48-bit compares and muxes. It is written for clarity, not pipelined. A
timing-closed implementation would register the tree and hold new arrivals for the
extra cycles, or split the list into banks.

## BM25 for lexical RAG

`bm25_scorer` scores documents as

    score(d) = Σ_t  qtf(t) · idf(t) · tf(t,d) · (k1+1) / (tf(t,d) + K_d),
    K_d = k1 · (1 − b + b·|d|/avgdl)

The query arrives preprocessed into word counts. For each query term the host
streams that term's postings `{doc, tf, idf, qtf, last}` on `post_*`, in any order.

Each posting passes through three stages:

1. a multiplier;
2. a `pipe_divider`, a restoring divider of 56 stages that accepts one division
   per cycle;
3. a read-modify-write of the document's accumulator.

The read-modify-write completes in one cycle (asynchronous read), so postings of
the same document may follow each other back to back. K_d depends only on document
length, so it is written once per corpus through `norm_*`.

After the last posting, documents 0 to `n_docs`−1 stream into the same top-k
retriever, one per cycle. Each accumulator is cleared as its score leaves, and also
when its K_d is written, so every query starts from zero without a clearing pass.
Postings must name documents below `n_docs`.

The accumulator memory holds 2^20 entries of 40 bits and is read asynchronously. A
block-RAM mapping would need a registered read and a forwarding path for repeated
documents.

Number formats:

- idf, k1+1 and K_d are unsigned Q8.8;
- tf is 16 bits and qtf 8 bits;
- each term's contribution is truncated to an integer in Q.8 before accumulation
  in a 40-bit accumulator.

## Memory as Context: query from a segment, cross attention over past memory

Recurrent memory models process a long input in segments. For each segment they
build a query, blend the cached memory embeddings most relevant to it, and hand the
blend to the model. `mac_kernel` does this in four streaming stages:

1. **Segment loader.** The `SEG_LEN` = 1024 segment embeddings arrive on `seg_*`.
   They are summed, and the floor mean x̄ = sum >>> 10 summarises the segment.
2. **Query linear projection.** The `D` rows of the projection matrix stream from
   HBM on `w_*`. Row r gives q[r] = Σ_j W[r][j]·x̄[j] in one cycle.
3. **Memory loader.** Meanwhile the `n_mem` past memory embeddings (up to `NMEM` =
   256) stream in on `mem_*` and are buffered on chip.
4. **Cross attention.** A first pass computes every score s_i = q·m_i and their
   maximum. A second pass forms weights w_i = 2^−((s_max − s_i)·scale) and
   accumulates Σ w_i·m_i and Σ w_i. Finally `D` rounded divisions, through the same
   pipelined divider as BM25, produce the output embedding on `out_*`.

The weights are a softmax in base 2, with `scale` (unsigned Q0.32) absorbing
log2(e)/√D and the squared quantisation step of the INT8 data. Integer scores of
full-range INT8 data reach 2^30, hence the 32 fraction bits. Each octave of 2^−x is approximated linearly (2^−f ≈ 1 − f/2), which
costs at most about 6 % in any single weight.

The kernel's own testbench compares the output bit for bit with the same integer
model, and within 24 LSB with the exact softmax blend. With `n_mem` = 0 (the first
segment) the output is zero. The kernel sits in the top beside the search path with
its own `mac_*` ports.

## Control

`cfg` (`mp_pkg::kcfg_t`) is latched on `start` and holds:

- `src`: `SRC_INNER` (keys × query) or `SRC_BM25`;
- `sel_mode`, `k` and `threshold`;
- `group_len`;
- `n_docs` and `k1p1` (k1+1) for BM25.

An inner-product search waits until the query is complete and no key write is
pending, then scans all `n_tokens` keys. A BM25 search starts at once and ends after
the posting marked `post_last`. `busy` stays high from `start` until `done`. A search
over an empty store, or with `n_docs` = 0, returns `done` with no indices. Keys may
be appended between searches, which is the decode loop: append one key, load a new
query, search.

Reset is asynchronous and active-low. It clears all control state. Data arrays are
not reset.

## Parameters

| parameter | default | origin |
|---|---|---|
| `HEADS` | 64 | query heads of the indexer (published) |
| `BRAM_TOKENS` / `URAM_TOKENS` | 16384 / 49152 | tier boundaries 16384 and 65536 (published) |
| `MAX_TOKENS` | 1,048,576 | GPU fallback beyond 1M tokens (published) |
| `K_MAX` | 2048 | k of the DeepSeek indexer (published) |
| `DIM`, `ELEM_W` | 128, 8 | own choice (INT8 keys of 128 elements) |
| `HP` | 16 | heads per cycle, own choice |
| `FIFO_DEPTH` | 8 | own choice |
| `NDOCS` | 1,048,576 | BM25 score store, own choice |
| `MAC_SEG_LEN` | 1024 | Memory-as-Context segment length (published) |
| `MAC_D`, `MAC_NMEM` | 128, 256 | embedding size and cached memories, own choice |

At the defaults the on-chip tiers hold 65,536 × 128 B = 8 MiB of keys.

## Where this departs from the published design

- The FPGA-side LLM decoder used for synthesized memory (an agent that rewrites a
  textual memory per segment) is not built. PCIe peer-to-peer transfer, the HBM
  controller and the host software are outside the RTL.
- Memory as Context: the segment summary (mean pooling), the embedding size
  `D` = 128, the buffer of 256 memories, the two-pass base-2 softmax and its linear
  approximation are this design's choices. The published description names the
  stages only.
- Integer (INT8) keys and queries replace the model's floating-point formats. Key
  dimension and element width are assumptions.
- Threshold selection compares the raw weighted score. A threshold defined on
  softmax-normalised scores (e.g. 5e-4) cannot be expressed, because the search path
  has no softmax.
- The BM25 score store holds 2^20 documents on chip. Corpora of 2M to 20M documents
  would need the scores in HBM. The inverted-index layout in HBM is not built:
  postings enter on a stream port.
- Embedding search for hybrid RAG works only if the embeddings fit `DIM` = 128. A
  1024-dimensional embedding needs a larger `DIM`.
- Per-tier bandwidths of the real device (tens of TB/s for BRAM/URAM) come from reading
  many banks in parallel. Here each tier delivers one 1024-bit key per cycle, and the
  engine consumes one key per 4 cycles.
- Handshakes, control, configuration record, tie rule, output order and all widths
  not listed above are this implementation's choices.

## Files

`rtl/`:

- `mp_pkg.sv`: shared types and constants.
- `stream_fifo.sv`: first-word-fall-through FIFO.
- `key_loader.sv`, `write_arbiter.sv`, `key_sram.sv`: write path and on-chip tiers.
- `read_arbiter.sv`, `query_loader.sv`, `inner_product_engine.sv`, `reduction_unit.sv`,
  `topk_retriever.sv`: scan path.
- `pipe_divider.sv`, `bm25_scorer.sv`: BM25.
- `mac_kernel.sv`: Memory as Context.
- `relevancy_retrieval_kernel.sv`: the top.

`tb/`: one self-checking testbench per module (`tb_<module>.sv`), plus:

- `tb_relevancy_retrieval_kernel.sv`: end to end at reduced size. It runs all three
  tiers, HBM stalls, output back-pressure, top-k replacement, threshold mode, group
  max, overflow, an empty search, decode append, BM25 searches and
  Memory-as-Context segments, and counts each mechanism.
- `tb_full_kernel.sv`: one top-2048 search over 65,792 keys (all tiers) and one
  full-size Memory-as-Context segment, at the default parameters.
- `hbm_model.sv`: the HBM stand-in.

Every testbench prints `TB_RESULT checks=N failures=M`.

## Simulating

With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/mp_pkg.sv \
        tb/tb_relevancy_retrieval_kernel.sv --top-module tb_relevancy_retrieval_kernel -o sim
    obj_dir/sim +verilator+rand+reset+2

(`-y` lets Verilator find each module in the file of its name; `-Wno-fatal` keeps the
remaining lint warnings, such as deliberately unconnected status outputs, from
stopping the build.) Replace the testbench and top-module names to run another test.

`tb_full_kernel` needs about a minute and roughly 0.5 GB of memory.
