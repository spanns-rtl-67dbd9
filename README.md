# SpANNS: near-memory search for sparse embedding vectors

Sparse text embeddings such as SPLADE or uniCOIL describe a document as a few
hundred weighted vocabulary terms out of some 30,000. A query has 10 to 50
such terms, and a search must find the K stored records with the largest inner
product against the query. An exhaustive search touches every record. A plain
inverted index touches every record that shares one term with the query, which
for soft SPLADE weights is most of the data set. A clustering index in the IVF
style does not work well in 30,000 dimensions.

This design combines the two kinds of index and puts the work next to the
DRAM that holds them:

* **Level 1** is content based. For every vocabulary dimension, an on-chip
  table gives where that dimension's level-2 list starts and how many clusters
  it has.
* **Level 2** splits each dimension's list of records into clusters. Each
  cluster has a *silhouette*: a short sparse summary vector whose inner product
  with the query bounds how good the cluster's records can be. Only clusters
  whose silhouette scores well are opened.
* **Forward index.** Every record of an opened cluster is fetched whole from
  the forward index and scored exactly.

The hardware is a CXL Type-2 device. It has a controller chip, two DIMMs that
hold the level-2 index ("L2Inv DIMMs") and six DIMMs that hold the forward
index ("F-Idx DIMMs"). Each F-Idx DIMM has one compute unit per rank, so 48
records are checked in parallel. The controller chip keeps the level-1 table,
scores the silhouettes, decides which clusters to open, removes duplicate
records and spreads the work over the ranks. It also keeps the best K scores.

The RTL here implements all of this digital logic. The CXL protocol stack,
the PHY and the DRAM dies themselves are not included: the top level exposes
the host side as plain ports and every DRAM rank as a read port.

## Query dataflow

A query arrives from the host with its non-zeros sorted by falling value
(the host does the sorting). The host also sends `n_probe`, the threshold
factor `beta` and a flag that selects one top-2K list or two top-K lists.

1. **Load.** The controller quantizes the 32-bit float values to 16-bit fixed
   point (Q5.10, with truncation and saturation). It clears the visited list
   and the top-K queue, and broadcasts the quantized query to all F-Idx ranks.
2. **Probe level 1.** It walks the first `n_probe` query dimensions, largest
   value first. Stopping before the end is the *early termination* knob. For
   each dimension it reads the level-1 entry `{ncl, l2_base}`.
3. **Check silhouettes.** Dimension `d`'s level-2 list lives in L2Inv DIMM
   `d mod 2`. The controller reads `ncl` silhouette beats from `l2_base` and
   scores each one against the query in the SpMV unit, one per cycle.
4. **Filter clusters.** A cluster is kept when
   `silhouette_score * 256 >= beta * kth_score`. Here `beta` is unsigned Q8.8
   and `kth_score` is the current K-th best exact score. Until the top-K queue
   is full, every cluster is kept.
5. **Translate pointers.** A kept cluster's pointer-list address and length go
   to its L2Inv DIMM's address generator. The generator reads the list and
   turns each record id, through a lookup table, into `{F-Idx DIMM, rank, bin
   address}`.
6. **Drop duplicates.** Record ids pass through a Bloom-filter visited list. A
   record already scored in this query (it shares another query dimension) is
   dropped.
7. **Balance.** The surviving pointers enter the delay queues. They issue each
   one to its rank as soon as that rank is free, out of order across clusters.
8. **Score.** The rank compute unit fetches the record, matches its columns
   against the query's, and writes a hit mask with the matching values to its
   results buffer. The distance calculator then accumulates the products.
9. **Collect.** Exact scores from all F-Idx DIMMs enter the top-K queue. When
   every dimension is done and nothing is in flight, `res_done` rises.

Only exact scores (step 9) enter the top-K queue. Silhouette scores are used
only against the threshold in step 4.

## Data layouts

Every memory access is a 64-byte beat (512 bits). Bit 0 is the least
significant bit of the beat.

| Structure | Where | Layout |
|---|---|---|
| Level-1 entry | on-chip, 256K x 32 bits, indexed by dimension | `{ncl[31:24], l2_base[23:0]}`: cluster count and beat address of the first silhouette in the L2Inv DIMM |
| Silhouette | L2Inv DIMM, one beat per cluster, `ncl` beats from `l2_base` | pairs `e = 0..7` at bits `e*48`: value (16-bit Q5.10) in `[e*48 +: 16]`, column in `[e*48+16 +: 32]`, unused column `0xFFFFFFFF`; pointer-list beat address in `[415:384]`; list length in `[431:416]` |
| Pointer list | L2Inv DIMM, from the silhouette's address | 16 record ids of 32 bits per beat |
| Lookup table | in each L2Inv DIMM's address generator, 4096 x 32 bits | indexed by `id >> 12`: `{dimm[31:29], rank[28:26], base_bin[25:0]}`. The record is in bin `base_bin + id[11:0]` at beat address `bin * 128` |
| Record | F-Idx rank, one 8 KB bin (128 beats) per record | beat 0: `nnz` in `[15:0]`, id in `[47:16]`; then `ceil(nnz/16)` beats of 32-bit columns; then `ceil(nnz/32)` beats of 16-bit values |

The silhouette beat and the record bin follow the paper in what they hold:
Ellpack silhouettes at the head of each level-2 entry, a length, values and a
pointer, and full records in 8 KB bins. The bit positions, the id grouping of
the lookup table and the 8-entry silhouette width are this design's choices.
One 8 KB bin holds a record of up to 1,354 non-zeros.

## Blocks

The source files are in `rtl/`, one module per file. Shared types and
constants are in `spanns_pkg`.

| Module | Role | Paper's part / this design's choice |
|---|---|---|
| `spanns_top` | Type-2 controller, 2 `l2inv_dimm`, 6 `fidx_dimm` | 8 channels, L2Inv : F-Idx = 1 : 3, 8 ranks per DIMM. One DIMM per channel is an assumption |
| `type2_controller` | query FSM, L1 buffer, silhouette check, cluster filter, delay queues, top-K queue, arbiters | the steps are the paper's. Processing one dimension at a time, the 256-entry cluster FIFO and round-robin arbitration are choices |
| `l1inv_buffer` | 256K x 32-bit level-1 table, one-cycle read | size is the paper's. Its LRU paging for vocabularies above 256K is **not built** |
| `quantizer` | float32 to Q5.10, combinational | 16-bit width is the paper's. The Q5.10 split, truncation and saturation are choices |
| `spmv_unit` | inner product of the query with one 8-entry Ellpack row per cycle, one-cycle latency | the paper cites an outside SpMV design without describing it. This is the simplest match-multiply-add |
| `bloom_filter` | 4096-bit visited list, two shift/add/xor hashes, test-and-set in one cycle, one-cycle clear | the hash style is the paper's. Size, hash count and exact hashes are choices |
| `silhouette_check` | query registers with quantizers, SpMV unit and visited list, as in the figure | |
| `cluster_filter` | threshold compare and a one-entry pipeline stage that asks the visited list about each record | the threshold rule is the paper's. The Q8.8 `beta` is a choice |
| `topk_queue` | 2 lanes of 10 sorted entries. When merged, what falls out of lane 0 enters lane 1 (top-20) | structure as drawn in the paper. K = 10 and 2 lanes are choices |
| `l2inv_dimm` | address generator plus a one-request-at-a-time arbiter on the DIMM read port. Silhouette reads go first | |
| `faddr_gen` | reads a pointer list beat by beat and emits translated candidates. `out_last` marks a cluster's last record | lookup-table address translation is the paper's. Its organisation is a choice |
| `delay_queues` | 5 cluster queues of 64 entries with out-of-order dispatch to ranks | 5 active clusters is the paper's best setting. The rest is a choice |
| `fidx_dimm` | per rank: `fidx_rank_cu` + `fidx_dist_calc`, then a round-robin score arbiter | one distance calculator per rank is a choice |
| `fidx_rank_cu` | fetch, 64 x 16 comparator array, filtering, 2-entry results buffer, dynamic mode | as drawn in the paper. Sizes are choices |
| `fidx_dist_calc` | MAC over the hit mask with a rotating query-value register | as drawn in the paper |

## The delay queues

Without the delay queues, records would be scored strictly in the order in
which clusters arrive. A cluster's records are spread over many ranks, but
several of them often land on the same rank. That rank then holds up the whole
stream while the others idle. The delay queues let up to five clusters be
*active* at once, and let any of them feed any idle rank.

Each of the five slots has a FIFO of 64 pointers and is in one of three
states:

* **FREE**: unused.
* **FILL**: receiving the current cluster's pointers.
* **CLOSED**: the cluster's last pointer has arrived; the slot is draining.

A pointer arriving from the cluster filter goes into the FILL slot. If no slot
is filling, it opens a FREE slot. The pointer marked `last` (end of the
cluster's list) closes the slot. A dropped duplicate still carries its `last`
marker, so a cluster whose records were all visited still closes its slot.

The input stalls (`in_ready` low) in two cases: no slot is free or filling, or
the filling slot's FIFO is full. Such stalls are what the `stall_cycles`
counter counts.

Every cycle, the queues are visited in rotating order. Each queue looks at its
head pointer's rank (`dimm * 8 + rank`). If that rank is ready and no other
queue has claimed it this cycle, the head is issued and tagged with the slot
number. Several queues can issue in the same cycle, to different ranks. When a
queue issues while an older active queue's head waits for a busy rank, the
dispatch is out of order, and `ooo_dispatches` counts it.

Each slot counts its records in flight. The count goes up on dispatch and down
when a score with its tag comes back from an F-Idx DIMM. A slot returns to FREE
only when it is CLOSED, empty and has nothing in flight. So a cluster stays
"active" until its last record is scored. The controller declares the query
done when every slot is free, the cluster FIFO is empty and all address
generators are idle.

## Record checking and the dynamic mode

A rank compute unit scores one record at a time. It reads the header beat,
then requests all column and value beats in one burst. Each column beat (16
columns) is matched in one cycle against all 64 query columns by a 64 x 16
array of 32-bit equality comparators. The array gives, per query row, whether
and where it hit, and per record column, whether and which query row it hit.

The *dynamic mode* decides which side drives the hit mask:

* **Query-driven** (`nnz_r >= nnz_q`): the mask has one bit per query
  non-zero. When query row `i` hits record column `j`, the value of record
  column `j` is stored at mask position `i` once the value beats arrive.
* **Record-driven** (`nnz_r < nnz_q`): the mask has one bit per record
  non-zero. For record column `j`, both the record's value and the matched
  query value are stored at position `j`.

The mask thus has `min(nnz_q, nnz_r)` positions. The distance calculator
walks it one position per cycle and multiplies the stored record value by:

* in query-driven mode, the head of a rotating register of query values
  (rotated within the first `nnz_q` entries, so it is back in place for the
  next record);
* in record-driven mode, the stored query value.

A score is ready `min(nnz_q, nnz_r)` cycles after the entry is taken (one
cycle for an empty mask). Short records, which are common, thus cost few
cycles whatever the query length.

The paper states both that the calculator takes `nnz_q` cycles and that the
mask comes from the smaller vector. This design follows the second.

## Interfaces and timing

All handshakes are valid/ready. A transfer happens on a clock edge where both
are high. Reset is active-low and asynchronous. Large storage arrays (FIFOs,
results buffers, L1 table, lookup tables) are not reset. They are only read
after being written.

* **DRAM ports** (`l2m_*`, `fm_*` on the top): a request is a beat address and
  a length in beats. The memory returns `len` beats in order with
  `rsp_valid`, one per cycle or with gaps, and cannot be back-pressured. Each
  requester has at most one request outstanding.
* **Host loading:** `l1_we`/`l1_wdim`/`l1_wentry` write the level-1 table.
  `lut_we`/`lut_waddr`/`lut_wdata` write the same lookup table into both L2Inv
  DIMMs.
* **Query:** hold `q_valid` with the query until `q_ready` (high when idle or
  done). `res_done` rises when the result is final, and stays high until the
  next query. `res_entries[lane][k]` with `res_valid` holds the result, best
  first. In merged mode lane 1 continues lane 0 (ranks 10..19).
* **Counters** for the current query: clusters checked and pruned, duplicates
  dropped, records scored, delay-queue stall cycles, out-of-order dispatches,
  dimensions probed and cycles.

The top-K queue takes one insertion per cycle per lane. Its K-th score, used
by the cluster filter, is registered.

## Departures from the paper and limits

* The LRU paging of the level-1 table is not built. The paper gives neither
  a page size nor where pages come from. The table holds 256K dimensions,
  eight times the BERT vocabulary.
* The visited list is keyed by record id. One passage of the paper says it
  tracks clusters, another that records already processed are dropped.
  Clusters belong to one dimension and never repeat within a query, so only
  record ids make the filter useful.
* A Bloom filter can report a record as visited that was not. Such a record
  is lost for that query, as in any Bloom-filter visited list. With 4,096 bits
  and about 550 records per query, the end-to-end test loses up to about 9 percent.
  A larger filter reduces this.
* The SpMV unit, hash functions, fixed-point formats, table layouts, queue
  depths, arbitration and all bit positions are this design's own. The paper
  does not give them.
* Queries are limited to 64 non-zeros. The host must cut longer ones to their
  64 largest values.
* A dimension may have at most 255 clusters, and a cluster at most 65,535
  records.
* There is no CXL interface, no PHY and no DRAM timing model. Rank ports see
  an idealised memory.

## Sizes against the evaluated data sets

The defaults hold the data sets the paper evaluates:

* MS MARCO with SPLADE or uniCOIL-T5: 8.8M records.
* Natural Questions with SPLADE: 2.7M records.

The limits against those data sets are:

* **Lookup table:** 4,096 groups of 4,096 ids cover 16.7M records.
* **Level-1 table:** 262,144 entries against a 30,522-term vocabulary.
* **Bins:** an 8 KB bin holds up to 1,354 non-zeros.
* **Forward index:** 8.8M bins take 72 GB, or 1.5 GB per rank over 48 ranks.

DRAM capacity itself is outside the design.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one computes its
expected values independently, prints
`TB_RESULT checks=<n> failures=<m>` and stops. A watchdog ends a hung run with
a failure. `tb/dram_model.sv` is a behavioural multi-port memory with a fixed
latency. Testbenches fill it with `write_beat()`.

With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/spanns_pkg.sv \
    tb/tb_spanns_top.sv --top-module tb_spanns_top -Mdir obj -o sim
./obj/sim
```

Replace `tb_spanns_top` with any other `tb_<module>`.

`tb_spanns_top` runs the whole accelerator at its default size (2 + 6 DIMMs,
48 ranks) and takes a few seconds. Its data set has:

* 600 synthetic records over 48 dimensions;
* clusters of 6 records;
* record placement skewed so that four ranks are hot spots.

It runs three queries:

1. `beta = 0`, 5 of 20 dimensions: the result must equal the exact top-10.
2. `beta = 1.0`, merged top-20.
3. `beta = 1.25`, 12 dimensions.

Every reported score is compared with the true inner product. The test counts
each mechanism: pruned clusters, dropped duplicates, delay-queue stalls,
out-of-order dispatches, record-driven records, merged mode and early
termination. A mechanism that never occurs fails the test.

`tb_type2_controller` runs the same scenario on a controller with one L2Inv
DIMM and two F-Idx DIMMs of two ranks.
