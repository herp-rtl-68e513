# HERP accelerator: bucketed hypervector search with incremental cluster expansion

Mass-spectrometry proteomics keeps large libraries of spectra that have already been
clustered. Each cluster is represented by a consensus spectrum, and every spectrum is encoded
as a 2048-bit binary hypervector (HV). At the instrument, new query spectra arrive all the
time. Each one must be matched against the library (database search). A query that matches
nothing should become a new cluster. Re-clustering the whole library for every such outlier
is what makes conventional tools slow.

This accelerator avoids that in two ways:

* **Buckets.** Spectra are binned by precursor mass into *buckets*. A query only has to be
  compared with the clusters of its own bucket. Different buckets are independent, so they
  are searched in parallel.
* **Cluster expansion instead of re-clustering.** Each bucket has a distance threshold that
  comes from the initial clustering. If a query's nearest cluster is within the threshold,
  the query gets that cluster's ID. Otherwise the query itself becomes a new cluster of the
  bucket: its HV is written into the bucket's next free CAM row, and later queries can match
  it.

The nearest-cluster search runs in content-addressable memory (CAM). One CAM unit holds one
bucket, and one search compares a query with every cluster of the bucket at once. A
loser-takes-all (LTA) tree then finds the smallest distance and its row. There are more
buckets than CAM units, so a scheduler decides which buckets are resident. It loads missing
buckets from a bucket cache or main memory and evicts the least frequently used ones.

The silicon this describes uses 3T2MTJ SOT-MRAM CAM cells, with Hamming distance sensed as
match-line current. This RTL is a digital, cycle-accurate model of the same architecture:
each CAM row computes its exact Hamming distance, and the LTA tree compares integers.

## Data path of one query

```
 q_* ──► bucket_calc ──► query_buffer ──► scheduler ──► bucket_slot[u] (one per CAM unit)
                                            │   ▲          query_fifo
                                   ld_req   ▼   │ ld_done  cam_unit  (16 arrays + LTA tree)
                                          controller ◄──── cluster_id_unit ──► res[u]
                                   bucket_cache │  ▲ new clusters (write-through)
                                                ▼  │
                                           main memory (mem_* port)
```

1. **Bucket index** (`bucket_calc`). The bucket is
   `floor((m/z − 1.00794) · C / 1.0005079)` for precursor m/z and charge C. m/z arrives in
   Q16.16. The division is a multiplication by round(2^24/1.0005079), and the floor is a
   right shift.
2. **Query buffer** (`query_buffer`, 16 entries). Entries stay in arrival order. Any entry
   can be taken out; the younger entries then shift down.
3. **Scheduler** (`scheduler`). Each cycle it dispatches the *oldest* buffered query whose
   bucket is resident and whose unit FIFO has room. A query of a resident bucket therefore
   overtakes older queries of absent buckets. Queries of one bucket still keep their order,
   because they all wait for the same FIFO.
4. **Bucket slot** (`bucket_slot`). The slot pops its next query and searches it
   (`cam_unit`, 3 cycles). The cluster ID unit then decides match or new cluster (1 cycle).
   For a new cluster the slot writes the HV into the CAM (1 cycle) and hands it to the
   controller for write-through (≥1 cycle). Only then does the slot issue the next query of
   that bucket.
5. **Result** (`res[u]`, a `result_t`). It carries the query tag, the bucket, the cluster row,
   the minimum distance and two flags: `is_new` for a new cluster and `overflow` for an
   outlier in a full bucket.

A cluster ID is the pair (bucket, row). Up to `UNITS` slots produce results in the same
cycle, one lane each.

## Inside a CAM unit

A 2048-bit HV is wider than one 128×128 array. A unit therefore puts `HV_DIM/ARR_COLS = 16`
arrays side by side, and each array stores one 128-bit slice of every cluster HV. Rows are
clusters and columns are HV elements.

* **`write_search_driver`** (one per array) drives the column lines. A search drives the
  complementary search lines S = q and S′ = ~q. A write drives the complementary bit lines
  BL = d and BL′ = ~d. Unused lines stay low.
* **`wordline_driver`** (one per array) raises the word line of the row being written.
* **`cam_array`**. A cell mismatches when it stores 1 and S′ is high, or stores 0 and S is
  high. In silicon every mismatching cell sinks current from its row's match line. The model
  counts the mismatches instead (`$countones`) and registers the count.
* **Accumulation**. The 16 partial distances of a row are added. This is the digital
  counterpart of summing the arrays' match-line currents.
* **`lta_tree`**. It finds the minimum over the rows in log2(N) levels of two-input nodes.
  Each node carries its winner's index, which is the "indexer". Rows at or above the
  bucket's cluster count never win. On a tie the lower index wins.

A search issued in cycle *t* gives its result in cycle *t+3*: driver register, array
register, then the accumulate+LTA register. A row written in cycle *t* is visible to a search
issued in *t+1*.

`ROW_BLOCKS` stacks several groups of 16 arrays so that a bucket can hold more than 128
clusters. The LTA tree then spans all of the rows. The default is 1.

## Why a bucket is processed one query at a time

Queries of one bucket depend on each other. A query may match a cluster that the previous
query of the same bucket has just created (in the published walkthrough, a query matches a
cluster defined one step earlier). The slot therefore serialises its bucket: a match takes 5
clock cycles from issue to next issue, a new cluster at least 7. Throughput comes from the
many buckets that run in parallel, not from pipelining within a bucket. The 3-stage CAM
pipeline *can* accept one search per cycle (see `tb_cam_unit`), so a forwarding scheme could
be added later without touching the arrays.

## Keeping the right buckets on chip

The scheduler keeps a residency table with one entry per unit: valid, the bucket ID held, and
an 8-bit saturating use counter. The counter is cleared on load and incremented on every
dispatch. When the oldest buffered query's bucket is absent and no load is running, the
scheduler picks a target unit:

1. a free unit, if there is one;
2. otherwise the unit with the lowest use count (least frequently used) among the units that
   are idle (empty FIFO, no query in flight) and whose bucket no buffered query still needs.

If no unit qualifies, the load waits. The scheduler sends (bucket, unit) to the controller
and marks the unit resident when `ld_done` arrives. Only one load runs at a time.

The **controller** owns the **bucket cache**: 4 whole-bucket slots, fully associative, with
round-robin replacement.

* On a **cache hit** it copies the bucket's rows from the cache into the unit (2 cycles per
  row). Then it writes the bucket's specs (ID, cluster count, threshold) into the unit's
  cluster ID unit.
* On a **miss** it reads the header and then each row from main memory. Each row goes into
  the unit and into a newly claimed cache slot. The slot stays invalid until the fill
  completes.
* Every **new cluster** is written through: its HV and the bucket's new cluster count go to
  main memory, and also to the cached copy if there is one. An evicted bucket therefore
  keeps its new clusters when it comes back. New clusters are served before loads, because
  slots stall on them.

**Setup.** The host presents bucket IDs on `pl_*`. Each preload fills a free unit, and the
host decides the order (for example, small buckets first so that more of them fit).

## Interfaces

| Port group | Protocol |
|---|---|
| `q_valid/q_ready`, `q_qid`, `q_mz` (Q16.16), `q_charge`, `q_hv` | valid/ready; accepted while the buffer has room |
| `pl_valid/pl_ready`, `pl_bucket` | valid/ready; ready once the load has started (or at once if the bucket is resident) |
| `mem_rd_valid/mem_rd_ready`, `mem_rd_hdr`, `mem_rd_bucket`, `mem_rd_row` | read request; `hdr=1` asks for the bucket header |
| `mem_rsp_valid`, `mem_rsp_hv`, `mem_rsp_count`, `mem_rsp_thr` | one-cycle response per request, any latency, one request outstanding |
| `mem_wr_valid/mem_wr_ready`, `mem_wr_bucket`, `mem_wr_row`, `mem_wr_hv`, `mem_wr_count` | write of one new cluster plus the bucket's new count |
| `res_valid[u]`, `res[u]` | one result per slot and cycle |
| `unit_valid`, `unit_bucket` | residency table |
| `n_*` | counters: dispatches, demand loads, preloads, evictions, overtakes, cache hits and misses, write-throughs |

Main memory holds, for every bucket, a header (cluster count, threshold) and its consensus
HVs. The threshold is in HV-bit units; how it is derived from the initial clustering's
inter-cluster distances is left to the software that builds the library.

## Sizes

| Parameter | Default | Published | Note |
|---|---|---|---|
| `HV_DIM` | 2048 | 2048 | HV dimension |
| `ARR_ROWS × ARR_COLS` | 128 × 128 | 128 × 128 | one SOT-CAM array |
| `UNITS` | 2048 | 16384 (512 MB of CAM ÷ 32 KB per unit) | scaled down, see below |
| `ROW_BLOCKS` | 1 | – | clusters per bucket = 128 × `ROW_BLOCKS` |
| `QB_DEPTH`, `FIFO_DEPTH`, `CACHE_SLOTS` | 16, 4, 4 | – | this design's choices |
| bucket ID, query tag | 14, 16 bits | – | this design's choices |

`UNITS` is the number of CAM units. The published evaluation assumes 512 MB of CAM, which is
16384 units of 16 arrays each. Modelled as flip-flops, that is 4 Gbit of state plus 2 million
2048-bit distance computations. Linting the top costs about 7.6 MB of memory per unit
(0.52 GB at 64 units, 2.0 GB at 256), so 16384 units would need about 125 GB. The default of
2048 units (64 MB of CAM, about 15 GB to lint) is the largest power of two that leaves
headroom on a 32 GB machine. Every
other size is the published one or is not published.

## Where this model departs from the published design

* Match-line currents, search-voltage scaling and the current-mode LTA are analog. Here they
  are exact integer distances and a digital minimum tree.
* A cell stores a bit and its complement in two MTJs. The model keeps one bit per cell, and
  the complement is implied. Device timing (sub-ns search, 2 ns write) becomes clock cycles
  of the pipeline above. The clock period is left to the implementation.
* Loading writes one HV row at a time into a unit (all 16 arrays of that row in parallel). The
  published loading is fully parallel across arrays.
* Dynamic allocation of LTA trees to buckets of different sizes is not built: each unit has
  its own tree. Buckets larger than `128 × ROW_BLOCKS` clusters cannot be held. The default
  of 128 clusters per bucket is far below the published large library, which averages about
  3900 spectra per bucket (2 M spectra in 509 buckets).
* Eviction uses LFU only. The published policy also weighs eviction cost by bucket size;
  that rule is not specified and is not built. "Small buckets first" at setup is left to the
  host.
* The published text searches one query from each FIFO every cycle. Here a bucket
  accepts a new query every 5 cycles (7 or more after an outlier), because of the
  dependence described above. Different buckets still search in the same cycle.
* The published text adds a new cluster to the CAM "in the next update", while its
  walkthrough lets the very next query of the bucket match it. This design follows the
  walkthrough and writes the new row before the next search of that bucket.
* The match threshold is called "dynamic" in the published text, with no rule for how it
  changes. Here it is a fixed per-bucket value that is loaded with the bucket.
* Cluster centroids are not re-averaged on a match. A matched query only receives the ID, and
  a new cluster's centroid is the query HV itself.
* An outlier in a full bucket is reported as `overflow` and gets no cluster.
* HD encoding of raw spectra happens before the query buffer and is not part of this RTL.
  Main memory is external.

## Files and simulation

`rtl/` has one module per file. The shared types (`result_t`, `bucket_t`, `qid_t`) are in
`herp_pkg.sv`. `herp_top` is the top.

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each one compares against a
software model and prints `TB_RESULT checks=N failures=M`:

* `tb_herp_top` runs the whole accelerator at reduced sizes: HV 256, arrays 16×64, 2 units,
  3 cache slots. It issues 153 queries (matches, outliers, repeats of outliers, a rotation
  over all buckets and an overflow burst). Every result is predicted by a per-bucket software
  model. The test also checks that each mechanism occurred: preload, demand load, eviction,
  cache hit and miss, overtaking, match, new cluster, overflow, write-through, FIFO
  back-pressure and a full query buffer.
* `tb_herp_top_large` runs the same test with the published HV and array sizes (HV 2048,
  128×128 arrays), 4 cache slots and 16 units. 17 buckets compete for the 16 units, and the
  test issues 341 queries. The build takes about half a minute and the run about a second.
  A build with the default 2048 units is too large to simulate in reasonable time, so 16
  units is the largest size that has been simulated.
* `tb/dram_model.sv` is a behavioural main memory. `tb/tb_herp_pkg.sv` generates
  deterministic HVs.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/herp_pkg.sv tb/tb_herp_pkg.sv \
    tb/tb_herp_top.sv --top-module tb_herp_top -Wno-fatal -j 8
./obj_dir/Vtb_herp_top +verilator+rand+reset+2
```

Files that a testbench needs but did not list are found through `-Irtl -Itb`. Each
testbench starts with `rst_n` high and drops it after 1 ns, so the asynchronous reset takes
effect before the first clock edge.
