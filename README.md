# FAST-Prefill sparse-attention accelerator in SystemVerilog

With a long prompt, prefill time is dominated by self-attention, whose cost grows with
the square of the context length. Dynamic block-sparse attention cuts the work down. For
each head, it first decides which 128-token key blocks each 128-token query block
actually needs, and then computes attention only over those (query block, key block)
pairs. Done naively on an accelerator, this loses most of the gain in two places:

* **Index generation.** Scoring the key blocks normally means building the full score
  matrix of the last query block against every key (128 x S per head), pooling it and
  normalising it. At 128K tokens that is gigabytes of temporaries.
* **The sparse step.** The surviving pairs touch key/value blocks in an irregular order,
  so the same block is fetched from off-chip memory many times.

This RTL implements both stages as streaming hardware around one shared matrix engine:

* **Index generator (`sigu`).** It reads every key block exactly once and folds the
  scores straight into small per-block accumulators. Once the scan ends, it decides per
  head between two patterns. It then selects blocks with a streaming top-k plus a
  coverage cut, and never stores a score matrix.
* **Attention unit (`sau`).** It turns the selected indices into a job list ordered by
  key block, so every K/V block is fetched once. A two-tier cache keeps each block while
  it still has consumers and drops it as soon as it has none. Partial outputs are added
  into a buffer addressed by (head, query block), so the out-of-order arrival of
  partial results needs no reorder step.

The top level, `fast_prefill_top`, contains:

* a global sequencer;
* the two units;
* a hybrid matrix unit of twelve 32x32 INT8 systolic arrays: six with ordinary
  multipliers and six with a bit-plane (AND-and-shift) multiplier;
* a special-function unit;
* a round-robin arbiter onto one memory read port.

One start pulse runs one attention layer's sparse prefill for all heads.

## Numbers and data layout

* Q, K and V are INT8. Products are INT8 x INT8, and accumulation is INT32.
* Memory is read in bursts. Each beat carries one row of `D` bytes, which is one
  token's vector for one head. With `S = nb*B` tokens:
  * Q row `s` of query head `h` is at `q_base + h*S + s`.
  * K row `s` of KV head `g` is at `k_base + g*S + s`.
  * V row `s` of KV head `g` is at `v_base + g*S + s`.
* Query head `h` uses KV head `h / (H/HKV)` (grouped-query attention).
* `nb` (the number of blocks in this prompt, at most `NB`) is a run-time input.

**Exponent.** Every exponent in the design uses one integer rule, shared by all units
through `fp_pkg::exp2_p8`:

    t = score >>> SCORE_SHIFT
    p = 0                                      if t < -64
    p = 127                                    if t > 47
    p = (F[t mod 16] << (floor(t/16) + 4)) >> 15   otherwise,  F[f] = floor(2^(f/16) * 2^15)

This is `16 * 2^(t/16)` truncated to 0..127. The score scale (`1/sqrt(d)`, `log2 e` and
the quantisation scales) is folded into `SCORE_SHIFT`.

**No max subtraction.** Softmax never subtracts a running maximum. Every probability is
an unnormalised value of at most 127. Each output row keeps `sum(p*v)` and `sum(p)` in
INT32 and is divided only when it is read out. At the largest size (131072 keys) the
sums stay below 127 * 128 * 131072 < 2^31.

**Reading results.** The output row is `trunc(sum(p*v) / sum(p))`, saturated to INT8.
It is produced by the special-function unit's NORM operation, one cycle after
`out_rd_valid`.

## Stage 1: sparse index generation

The generator works on the last query block `Q^` (B rows) of each head.

**Fetch.** It first fetches `Q^` for all heads and keeps their pooled means. It then
walks the key blocks in order, `j = 0..nb-1`. Each key block of each KV head is fetched
once into the key-block buffer and pooled as it streams in. For every query head
sharing that KV head, the generator issues the following tiles to the matrix unit,
several arrays at a time:

* the `(B/N)^2` tiles of `Q^ K_j^T`;
* one extra 1x1 tile, the dot product of the pooled query and the pooled key.

**Draining a score tile.** As each score tile drains, the softmax unit turns each row
segment into exponents. A segment is one query row `i` against `N` keys. Keys after the
query position in the diagonal block are masked to zero. The exponents then go to two
accumulators:

* **Vertical.** `v[h][j]` adds everything that block `j` received. This is the
  column-wise block pooling of the score matrix, normalised at the end by the head total.
* **Slash.** Each key `k` of block `j` seen from query row `i` lies on block diagonal
  `nb-1-j` when `k <= i`, and on diagonal `nb-2-j` otherwise. A segment therefore adds
  to at most two bins. This is block pooling along diagonals, done without materialising
  the diagonals.

The pooled-query tile gives the query-aware estimate `w[h][j] = exp(q̄·k̄_j)`.

Both accumulators are one-entry-per-(head, block) memories updated with a single-cycle
read-modify-write. Across all heads they hold `2 * H * NB` 32-bit words instead of the
`B x S` score tensor.

**Pattern decision.** After the scan, each head compares the true block distribution
`p = v/V` with the estimate `q = w/W` using the Jensen-Shannon divergence. The
comparison avoids per-element division:

    m'  = v*W + w*V
    A   = sum v * (1 + log2 v + log2 W - log2 m')
    Bq  = sum w * (1 + log2 w + log2 V - log2 m')
    JSD = (A*W + Bq*V) / (2*V*W)       (bits)

`log2` is a leading-one detector plus a 17-point table of `log2(1 + i/16)` with linear
interpolation. The head is **query-aware** if `sqrt(JSD in nats) < tau`. The hardware
tests this as `A*W + Bq*V < 2 * tau2_q16 * V * W`, with `tau2_q16 = tau^2/ln2 * 2^16`
(945 for tau = 0.1). Otherwise the head is **vertical-slash**. If either total is zero,
the head falls back to vertical-slash.

**Selection.** One selector serves both top-k and coverage:

1. It streams the score vector once, keeping the `KMAX` largest entries in a sorted
   list. Zero entries are never kept, and a tie goes after entries already in the list.
2. It emits the shortest prefix whose sum reaches `gamma` of the total
   (`prefix * 2^16 >= gamma_q16 * total`, with no reciprocal).

* A query-aware head is selected once, on `w`.
* A vertical-slash head is selected twice, first on `v` and then on the slash bins.

Each emitted index comes out with its head and kind (vertical, slash or query-aware).

## Stage 2: sparse attention

### Job list (`qk_mapping`)

Selected indices become (query block `qb`, key block `kb`) pairs under causality:

* A vertical or query-aware index `j` is used by every `qb >= j`.
* A slash index `d` pairs `qb` with `kb = qb - d`.
* A slash pair whose key block is already a vertical column of the same head is dropped,
  so each head gets the union of the two sets.

The pairs are bucketed by key block identity, `bucket = kb*HKV + kv_head`, in three
linear passes:

1. **Count.** Build block-use counters.
2. **Offset.** A prefix sum gives each bucket's first slot.
3. **Fill.** Write each `(h, qb)` at its bucket's pointer.

The result is a job list ordered by key block, with no sort. The counters are kept as
remaining-use counts. They are decremented as jobs finish, and they are the liveness
information for the cache. `JOB_MAX` is sized for the worst case (`KMAX` vertical plus
`KMAX` slash indices for every head). If it is exceeded, `overflow` is set and the
excess pairs are dropped.

### Liveness-driven cache (`kv_cache`)

The cache has a hot tier and a cold tier of K+V block slots. The prefetcher runs ahead
of the scheduler, in bucket order, by at most `WIN` buckets:

* A bucket with no remaining uses is **skipped** and never fetched.
* A bucket already resident is passed over.
* Otherwise the block goes to the **hot** tier if its remaining-use count is at least
  `T_hot = nb/2` (half the query blocks), and to the **cold** tier if not.
* If the chosen tier has no free slot, prefetch **waits** (counted as a full-tier
  stall). Nothing live is ever evicted.

The scheduler releases a bucket when its last job ends, and the slot becomes free at
once (evict on nil).

* **Hit:** the block was resident the first time the scheduler asked for it.
* **Miss:** the scheduler had to wait for it.

### Scheduler (`sau`)

For each bucket, in order, the scheduler waits for the block and then runs every job
`(h, qb)` of that bucket:

1. Fetch the query block.
2. Compute `S = Q K^T` on the matrix unit (inner dimension `D`).
3. Drain it through the softmax unit (causal mask when `qb == kb`) into an INT8 tile `P`
   and the row sums.
4. Compute `P V` (inner dimension `B`).
5. Add the tile and row sums into the keyed accumulator at the job's `(h, qb)`.

The first job for a key overwrites the accumulator and later jobs add to it, so nothing
has to be cleared. At the end, the accumulator holds every row's `sum(p*v)` and
`sum(p)`.

## The hybrid matrix unit

Each array is an output-stationary `N x N` grid:

* A operands enter from the left and B operands from the top, each skewed by its
  row/column index.
* A first/last flag travels with the A operand, so a PE restarts its accumulator on a
  new job.
* A job of inner length `K` streams in over `K` cycles. The result is valid `2N-2`
  cycles after the last beat.

All arrays of the unit work in lock step on separate tiles. A client therefore issues up
to `NA_DSP + NA_LUT` tiles per job.

The bit-plane arrays replace the multiplier with `bitplane_mul`:

* Each INT8 operand is split into a signed high nibble and an unsigned low nibble, and
  the result is four nibble products, shifted and added.
* Each nibble product is a sum of AND-ed bit planes, shifted by bit position.
* The sign bit of a signed nibble carries weight `-2^3`. This extends the unsigned
  bit-plane formulation to two's complement.

## Sequencing

`global_fsm` runs one step in this order:

1. Clear the attention unit's job state.
2. Run the index generator with the matrix unit granted to it.
3. After all heads' indices are delivered (the attention unit needs the complete set),
   run the attention unit with the matrix unit granted to it.

`done` marks the end of the step and `cycles` counts its length.

## How this relates to the published design

**Follows the published description:**

* the overall split into index generation and sparse attention;
* fetching each key block once and accumulating vertical, slash and query-aware
  scores as the blocks stream;
* the JSD test against tau = 0.1;
* streaming top-k and coverage selection;
* the bucketed job list with block-use counters and offsets;
* the hot/cold cache with `T_hot` = 50% of query blocks, evict-on-nil and lookahead
  prefetch;
* keyed accumulation;
* six plus six 32x32 INT8/INT32 arrays with a bit-plane variant;
* an SFU with exp, normalisation and SiLU;
* a global sequencer.

**Choices made here, where the description is silent:**

* all number formats and the exponent rule above;
* no softmax max subtraction;
* the slash binning;
* the fixed-point JSD;
* the index-to-pair rule;
* the output-stationary array dataflow;
* a single memory read port with one burst in flight;
* the hit/miss definition;
* all sizes not printed in the paper (`D`, `H`, `HKV`, `KMAX`, `JOB_MAX`, tier sizes,
  `WIN`, `SCORE_SHIFT`).

**Deliberate departures:**

* The query-aware estimate pools only the last query block. The algorithm listing
  pools all queries, but the hardware description feeds the last block's pooled query.
* One key fetch feeds both the true and the estimated scores.
* Row softmax in the index generator is replaced by one normalisation over the whole
  head, which is a close but not identical statistic.

**Not built:**

* the bypass path for low-reuse blocks. Its behaviour is not described, and every
  block is staged through a slot.
* the QKV projection and feed-forward layers. They only share the matrix unit and SFU,
  and no schedule for them is given.
* host, DRAM/HBM devices and memory controllers, which are modelled in the testbenches
  only.

**Not practical at full size.** The keyed output buffer holds the whole layer's INT32
partial outputs: `H * NB * B` rows of `D` lanes, 1.6 GB at the defaults. A real build
would keep it off chip or bound the context. Here it is a plain array. It is correct in
simulation but is not a realistic on-chip memory at the default size.

The Q block is re-fetched for every job. Only K/V reuse is managed.

## Parameters (defaults)

| Parameter | Default | Meaning |
|---|---|---|
| `B` | 128 | tokens per block |
| `D` | 128 | head dimension (bytes per memory row) |
| `N` | 32 | systolic array edge |
| `NA_DSP`, `NA_LUT` | 6, 6 | arrays with ordinary and with bit-plane multipliers |
| `H`, `HKV` | 24, 8 | query and KV heads (Llama-3.2-3B shape) |
| `NB` | 1024 | blocks in the longest context (128K tokens) |
| `KMAX` | 64 | top-k candidate list length |
| `JOB_MAX` | `H*NB*2*KMAX` | job list entries |
| `HOT`, `COLD` | 256, 256 | K+V block slots per tier (about 16 MB in total) |
| `WIN` | 8 | prefetch lookahead in buckets |
| `SCORE_SHIFT` | 8 | score to exponent scaling |

Run-time inputs:

* `nb`;
* the three base addresses;
* `gamma_q16` (coverage, for example 0.9 = 58982);
* `tau2_q16` (945 for tau = 0.1).

The build fits models with 24 query heads over 8 KV heads and head dimension 128 (such as
Llama-3.2-3B) at 4K to 128K tokens. Models with other head counts or head dimensions
need the parameters changed.

## Files

* `rtl/fp_pkg.sv`: shared constants, types and the exponent function.
* Matrix engine: `bitplane_mul`, `mpu_pe`, `systolic_array`, `hybrid_mpu`.
* Function units: `sfu` and `softmax_unit`.
* Index generator: `key_block_fetch`, `block_pool`, `vertical_acc`, `slash_acc`,
  `divergence_eval`, `stream_topk`, `sigu`.
* Attention unit: `qk_mapping`, `kv_cache`, `keyed_acc`, `sau`.
* System: `hbm_rd_arb`, `global_fsm`, `fast_prefill_top`.
* `tb/`: one self-checking testbench per unit (`tb_<unit>.sv`) and the memory model
  `hbm_model.sv`. The cache is tested inside `tb_sau`, and the PE inside
  `tb_systolic_array`.

Each file starts with a comment on what it does, its interface and timing, and which
parts follow the published design.

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog. Run one
with Verilator 5 from the repository root:

    verilator --binary --timing --assert -Wno-fatal -Irtl rtl/fp_pkg.sv tb/tb_fast_prefill_top.sv \
              -y rtl -y tb --top-module tb_fast_prefill_top
    ./obj_dir/Vtb_fast_prefill_top

The unit testbenches run at reduced sizes and compare against reference models written
in the testbench.

**`tb_fast_prefill_top`** runs the whole step at this reduced size:

* 8-token blocks and d = 8;
* 4x4 arrays, one of each kind;
* 4 heads and 4 blocks;
* 2 hot slots and 1 cold slot.

It generates Q/K/V so that half of the heads take each pattern. An independent model
recomputes the block scores, the divergence, the selections, the pair union and every
output row. The testbench checks the following, and counts a failure for any mechanism
that never happened:

* the emitted indices and patterns;
* every normalised output;
* the job count;
* that each mechanism happened: both patterns, cache hits and misses, hot and cold
  fills, skipped blocks, full-tier stalls and causal masking.

`tb_sigu` and `tb_sau` do the same for each unit on its own, with grouped-query heads.

**`tb_fast_prefill_full`** builds the top with every parameter at its default:

* twelve 32x32 arrays;
* 24 query heads over 8 KV heads;
* d = 128 and 128-token blocks;
* 1024-block buffers and 256 + 256 cache slots.

It runs a 2-block (256-token) prompt through the same reference model. Half the heads
take each pattern, and all 48 jobs and every output row are checked (about 590,000
checks). The step takes about 220,000 cycles.

Verilator needs several minutes and about 2.5 GB of memory to build this testbench,
mostly for the twelve arrays and the output buffer. Longer prompts at the default build
only need `NB` in the testbench raised. The run time grows with the number of jobs.
