# A streaming accelerator for Tanimoto similarity search over molecular fingerprints

Drug discovery often needs the molecules in a large library that are most
similar to a query molecule. Each molecule is a 1024-bit Morgan fingerprint.
The similarity of two fingerprints Q and X is their Tanimoto coefficient,
|Q AND X| / |Q OR X|. A query asks for the K = 20 most similar compounds in a
library of about 1.9 million.

The design answers a query in one of two ways, chosen per query:

* **Exhaustive search with BitBound and folding** (`mode = 0`). The whole
  library streams through the engine at one compound per clock. Two tricks
  reduce the work and the bandwidth:
  * the bit-count bound drops compounds that cannot reach the similarity
    cutoff;
  * a first pass runs on 8-fold compressed fingerprints. Only a shortlist is
    rescored on the full fingerprints.
* **Approximate graph search with HNSW** (`mode = 1`). The engine walks a
  hierarchical navigable small-world graph built over the library. It scores
  only the few hundred compounds it visits.

Both engines are built from a small set of streaming units:

* a population counter;
* a Tanimoto unit;
* a merge-sort Top-K selector;
* a register-array priority queue.

Every unit accepts a new input every clock cycle (II = 1). The intended clock
is 450 MHz, with the library in HBM. At 450 MHz and 1024 bits per cycle, one
exhaustive engine reads 57.6 GB/s. It scans 1.9 million compounds in about
4.2 ms.

## Arithmetic conventions

`mss_pkg` holds the shared types:

| Name | Width | Meaning |
|---|---|---|
| `FP_W` | 1024 | fingerprint bits |
| `score_t` | 12 | Tanimoto score as a fraction, `floor(4096 * inter / union)` |
| `id_t` | 21 | compound index; holds up to 2,097,152 compounds |
| `cnt_t` | 11 | bit count 0..1024 |
| `cand_t` | 34 | `{valid, score, id}` |

Score rules:

* A score of exactly 1.0 saturates to 4095.
* Two empty fingerprints (union 0) score 0.

Ranking rule, used by every sorter and queue (`cand_better`):

* valid entries first;
* then the higher score;
* on equal scores, the lower index.

This makes every result list deterministic, so a reference model can predict
it exactly.

The similarity cutoff `sc` uses the same 12-bit fraction format. For example,
0.8 is 3277.

## Population count and the Tanimoto unit (`bitcnt`, `tfc`, `frac_div`)

`bitcnt` counts a 1024-bit word in two pipeline stages: sixteen 64-bit slice
counts, then their sum. It has a latency of 2 cycles.

`tfc` computes the popcounts of Q AND X and Q OR X in parallel. It then
divides them in `frac_div`, a 13-stage restoring divider that produces one
quotient bit per stage. The unit takes one database fingerprint per cycle and
produces its scored `cand_t` 15 cycles later.

With `FILTER = 1` the unit also applies the BitBound test:

* A compound X can reach similarity Sc with Q only if
  `cnt(Q)·Sc <= cnt(X) <= cnt(Q)/Sc`.
* `cnt(X)` arrives with the fingerprint.
* Compounds outside `[lw_bd, up_bd]` produce no output.
* A filtered compound still occupies its pipeline slot. The filter saves
  sorting work, not scan cycles.
* `in_last` always passes through, so the end of a scan is never lost.

## The Top-K merge sorter (`topk_merge`, `merge_stage`, `cand_fifo`, `topk_keep`)

This is the least obvious part of the design. The sorter must:

* accept a scored compound every cycle with no back-pressure, for millions of
  cycles;
* keep the best K;
* use only a few comparators.

A sort network over the whole stream is impossible. A K-entry insertion array
would need K comparators. The sorter is instead a streaming merge sort that
only ever keeps what can still matter. K is rounded up to a power of two,
KP (32 for K = 20; 1024 for the rescoring shortlist of 640).

### Building sorted runs: `merge_stage` × log2(KP)

Stage s receives sorted runs of length R = 2^s and produces sorted runs of
length 2R:

* Incoming runs go alternately into FIFO A and FIFO B. Each FIFO is
  `cand_fifo`, 2R + 2 entries deep.
* Once A holds a complete run and B has started its run, one comparator merges
  the two heads.
* Two counters remember how many entries of the current pair have left each
  side. When one side is used up, the other side drains without comparing.
* The output is registered.

Because the input arrives at most one entry per cycle and the merge emits one
per cycle, no stage ever needs to stall. Stage 0 takes the raw stream as runs
of length 1.

After log2(KP) stages the stream is a sequence of sorted KP-entry runs.

### Keeping the best K: `topk_keep`

The final stage holds two FIFOs of 2K entries:

* BEST holds the current best list, sorted.
* NEW receives the incoming run.

Only the first K entries of a run can ever reach the result, so:

* NEW stores only those K entries of each run.
* The KP − K worst entries of the run are counted as they arrive and
  discarded. A skip counter handles entries that have not arrived yet.

A single comparator merges the heads of BEST and NEW for exactly K cycles. The
merged entries are appended to the tail of BEST, which is why BEST is 2K deep.
After those K cycles:

* the old BEST entries left over are discarded in one step by moving the read
  pointer;
* the rest of the run in NEW is discarded in one step by moving the read
  pointer too.

A KP-entry run thus costs K ≤ KP cycles, so the stage keeps pace with the
input. In all the sorter has log2(KP) + 1 comparators.

### Ending a scan: the front end

`in_last` marks the end of a scan; it may carry an entry or not. The front
end then:

1. pads the last run up to KP with invalid entries, which rank below every real
   entry;
2. waits until every run has reached `topk_keep`;
3. streams the K best out of BEST, best first, with `out_last` on the K-th.

A scan with fewer than K real entries returns invalid entries at the tail of
the list. A scan with no entries at all returns K invalid entries.

Timing:

* `busy` is high from the first input until the result has left.
* The first result entry appears about N + (KP − N mod KP) + KP cycles after
  the first of N inputs.
* Streaming the result takes K cycles.

The testbench bounds the latency by N + 2·KP + 8·log2(KP).

### Assertions

* `cand_fifo` flags overflow and underflow.
* `topk_keep` checks that BEST never exceeds its bound.
* `topk_keep` checks that a skip never overlaps an entry still being merged.

## The register-array priority queue (`prio_queue`)

The HNSW engine needs two queues of ef entries. Each queue:

* inserts a scored compound;
* removes the closest entry;
* removes the furthest entry;

one operation per cycle.

`prio_queue` keeps its N entries sorted in a register array, best at slot 0.

* **Push.** Every slot compares the new entry with its own entry and with its
  upper neighbour's. In the same cycle each slot either keeps its entry,
  takes the new one, or takes the neighbour's entry as everything below the
  insertion point shifts down one place. A push into a full queue loses the
  worst entry.
* **Pop best** shifts the array up by one slot.
* **Pop worst** clears the last valid slot.

`best`, `worst`, `size` and `full` come straight from registers.

Assertions check two rules:

* at most one operation per cycle;
* the array stays sorted.

The comparator count is linear in N, as in an odd/even compare-and-swap
array. Here an insert completes within its cycle instead of rippling through
alternating even/odd exchanges.

## The BitBound & folding engine (`bbf_engine`, `fold_unit`)

Folding ("compression scheme 1") cuts a 1024-bit fingerprint into m sections
of 1024/m bits and ORs them together. At m = 8 a compound takes 128 bits, so
one 1024-bit memory word carries eight compounds' worth of bandwidth. The
folded Tanimoto score overestimates some similarities and underestimates
others. For this reason the first pass keeps a generous shortlist,
k_r1 = K · m · log2(2m) (640 for K = 20, m = 8), and the second pass rescores
it on the full fingerprints.

A query runs in these steps (states `E_CNT`, `E_BOUND`, `E_SCAN`, `E_WAIT`):

1. **Count and bound.** `bitcnt` counts the query. The window is
   `lw = ceil(cnt(Q)·Sc)` and `up = floor(cnt(Q)/Sc)`, computed with Sc in
   units of 2^-12. `sc = 0` disables the bound, which gives a plain search.
2. **Folded scan.** The engine issues one read per cycle on the folded-database
   port for `scan_len` compounds, starting at `scan_base`. The first TFC scores
   each returned word `{folded fingerprint, bit count of the full fingerprint}`
   against the folded query (`fold_unit`) and drops compounds outside the
   window. Each result goes into a Top-K sorter of depth KR1.
3. **Rescore.** The KR1 indices leave the first sorter one per cycle. Each is
   issued as a read on the full-fingerprint port. The second TFC scores the
   returned fingerprints, which carry their index back.
4. **Result.** A Top-K sorter of depth K streams the result on `res_*`.

The engine requests one word every cycle of the scan; the testbench checks
this.

The database is stored pre-folded, together with the full bit count, so that
the filter uses the exact bound. The scanned range is an input. A host that
sorts the library by bit count can therefore restrict the scan to the window
and gain the search-space reduction in memory traffic too.

## The HNSW engine (`hnsw_engine`, `search_layer_top`, `search_layer_base`)

### Graph layout in memory

The graph has layers 0..`ep_level`.

* Node n's neighbour list on layer l occupies `MAXDEG = 2M` consecutive
  adjacency words starting at word `((l · N_DB) + n) · MAXDEG`.
* Each word is `{valid, id}`.
* A list ends at its first invalid word. On the upper layers it also ends
  after M words, since HNSW gives upper-layer nodes at most M links and
  base-layer nodes at most 2M.

Fingerprints are read by index from a separate port, which echoes the index
with the data. Both ports accept a request every cycle and answer in order,
after any latency.

### Descent: `search_layer_top`

Starting from the global entry point on layer `ep_level`, the unit does the
following on each layer down to 1:

* it streams the current node's neighbour list through its own TFC, one
  neighbour per cycle;
* it tracks the best neighbour;
* it moves to that neighbour if the neighbour is closer than the current node.

When no neighbour improves, the unit steps down a layer. The node reached on
layer 1 becomes the entry point of the base search (`out_ep`, `out_score`).

### Base search: `search_layer_base`

Two `prio_queue`s of EF entries hold C (candidates to expand) and R (results
so far). Each round:

1. pops the closest candidate from C;
2. stops if that candidate is further than the furthest entry of R (`B_POP`);
3. otherwise streams the candidate's base-layer list (`B_SCAN`). For each
   neighbour in turn:
   * the adjacency word returns;
   * one cycle later the visited table is checked and updated;
   * an unvisited neighbour's fingerprint is requested;
   * the TFC scores it;
   * the neighbour enters C and R if R is not full or if it beats R's furthest
     entry.

When the search stops, the first K entries of R are the answer, since R is
already sorted (`B_OUT`).

The visited table is the one large memory of the design: N_DB × EPW bits
(1.9 M × 8 = 15.2 Mbit), which suits UltraRAM.

* Instead of a visited bit it stores the tag of the query that last visited
  the compound. A compound counts as visited when its tag equals the current
  query's tag. A new query only increments the tag.
* The table is cleared by an N_DB-cycle sweep (`B_CLEAR`). The sweep runs on
  the first query after reset, and again when the tag wraps, once every
  2^EPW − 1 queries.
* The sweep costs 1.9 M cycles, about 4 ms at 450 MHz. Between sweeps a query
  pays nothing for clearing.

`hnsw_engine` runs the two units one after the other and lends each the
fingerprint and adjacency ports in turn.

## Top level (`mss_accel`)

`mss_accel` holds one engine of each kind. A `start` pulse latches `mode` and
the query inputs and starts the selected engine. The three memory ports go
out to the library store:

* folded database;
* full fingerprints, shared and owned by the running engine;
* adjacency lists.

One result interface comes back. `busy` stays high until `res_last`. An
assertion checks that the two engines are never busy together.

## Where this design departs from the published architecture

* **Engines.** The published accelerator builds the exhaustive engine and the
  HNSW engine as separate FPGA images. Each is replicated into P parallel
  engines fed from HBM through on-chip buffers, with a host on PCIe. Here
  there is one engine of each kind behind a mode input. The HBM, host link and
  staging buffers are outside the RTL; their place is taken by the memory
  ports. Throughput therefore scales by instantiating more engines; the
  replication is not written.
* **Top-K resources.** The published sorter is stated to need log2K + 1
  comparators, log2K + 2K FIFO entries and a latency of N + log2K. This
  sorter has log2(KP) + 1 comparators. Its FIFOs are larger, 2R + 2 per merge
  FIFO, because the FIFO organisation is not given. Its latency adds the
  padding of the last run and one KP run.
* **Priority queue.** The published queue uses an even/odd compare-and-swap
  register array. This one uses a parallel compare-and-shift insert, with the
  same II of 1 and a linear comparator count.
* **Greedy descent.** The descent follows the standard HNSW greedy step: move
  to the closest neighbour while it improves. The published pseudocode
  compares each neighbour with the current node rather than the best so far.
* **Candidate queue.** The base search bounds C to ef entries, as the
  published hardware sizes both queues at ef. The software algorithm lets C
  grow.
* **Memory interface.** The score encoding, memory-port protocol, adjacency
  layout, visited-table tags, pre-folded database words and scan range are
  this design's own.
* **Parameters.** Folding level, K, M and ef are build-time parameters. The
  default build is the published operating points:
  * folding 8, cutoff 0.8, top 20 (reported at about 25 000 queries/s and
    0.97 recall);
  * M = 20, ef = 20 (about 103 000 queries/s and 0.92 recall).

  Other points of the published sweeps need a rebuild:
  * folding 1..32;
  * M 5..50;
  * ef 20..200.

## Verification

Each unit has a self-checking testbench in `tb/`. It compares against
reference models written independently in `tb/mss_tb_pkg.sv`:

* a software Tanimoto;
* folding;
* a sort-based two-pass BitBound & folding search;
* a software HNSW descent and base search on random test graphs.

Every testbench has a watchdog and ends by printing
`TB_RESULT checks=<n> failures=<n>`.

| Testbench | What it exercises |
|---|---|
| `tb_bitcnt` | edge patterns and random words, latency 2 |
| `tb_fold_unit` | the worked 8-bit example, then random 1024-bit words at m = 8 |
| `tb_tfc` | scores against exact division, filter window, latency |
| `tb_topk_merge` | random scans of many lengths, back to back, latency bound |
| `tb_prio_queue` | random push/pop mix against a sorted model |
| `tb_bbf_engine` | full two-pass search on a 300-compound library, one read per cycle |
| `tb_search_layer_top` | descent on random 4-layer graphs |
| `tb_search_layer_base` | base search with tag wrap and repeated sweeps |
| `tb_hnsw_engine` | both units together |
| `tb_mss_accel` | end to end at reduced size (see below) |
| `tb_mss_accel_full` | default build end to end (see below) |

`tb_mss_accel` runs at reduced size: 4096 compounds, M = 4, ef = 8, K = 8. It
alternates modes, and counts and requires each mechanism at least once:

* the bound filter dropping a compound;
* run padding;
* rescoring;
* a layer descent;
* the early stop of the base search;
* a full candidate queue;
* the visited-table sweep;
* a mode switch.

`tb_mss_accel_full` uses every default parameter:

* an exhaustive query over all 1.9 million compounds, about 1.9 M cycles;
* an HNSW query that includes the 1.9 M-entry visited-table sweep.

It runs in under a minute.

The test libraries are generated on the fly: each fingerprint is a hash of its
index, with varied bit densities. They exercise the datapath but do not show
the search quality on real chemistry. The recall figures quoted above are the
published ones, not results of this RTL.

### Running a testbench

All files are SystemVerilog-2017. Compile the package first, then the other RTL
files, then the testbench package and memory models:

```sh
RTL="rtl/mss_pkg.sv $(ls rtl/*.sv | grep -v mss_pkg)"
TBC="tb/mss_tb_pkg.sv tb/hnsw_mem_model.sv tb/mss_mem_model.sv"
verilator --binary --timing --assert -Wno-fatal $RTL $TBC tb/tb_mss_accel.sv \
  --top-module tb_mss_accel -o sim
./obj_dir/sim
```

Replace `tb_mss_accel` with any testbench name. Unit testbenches need only the
RTL files of their unit, but the full list works for every one.
