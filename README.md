# SpecHD clustering datapath in SystemVerilog

Tandem mass spectrometry produces millions of MS/MS spectra per experiment,
and many of them are repeated measurements of the same peptide. Clustering
them removes that redundancy before database search. SpecHD, an FPGA framework
for hyperdimensional (HD) spectrum clustering, does this in three steps:

1. each spectrum is cleaned up (precursor peaks and noise removed, the most
   intense peaks kept, intensities normalized);
2. each spectrum is encoded into one binary hypervector of 2048 bits, so that
   similar spectra give hypervectors a small Hamming distance apart;
3. spectra whose precursor masses fall into the same narrow bucket are
   clustered by hierarchical agglomerative clustering (HAC), run with the
   nearest-neighbour-chain (NN-chain) algorithm on the Hamming distance
   matrix. A distance threshold then cuts the dendrogram into flat clusters,
   and each flat cluster gets a consensus spectrum.

This repository holds a register-transfer implementation of that datapath:
preprocessing, bucket assignment, one ID-Level encoder, and five clustering
kernels behind a bucket dispatcher. It follows the published description of
SpecHD where that description gives the mechanism, and fills the gaps with
plain, documented choices (listed in the section "Where this RTL departs from
the published design"). The published system is written in HLS, runs the
preprocessing inside a computational SSD and moves data through PCIe
peer-to-peer transfers and HBM; those platform parts are not modelled here.
Every link between blocks is a valid/ready stream instead.

## Dataflow

```
 raw peaks ──► spectra_filter ──► topk_selector ──► thresholding_normalizer ──┐
 (with spectrum   precursor and    bitonic sort,     1% of base peak,          │
  metadata)       m/z range        keep TOPK         levels and m/z bins       │
                                                                               ▼
                               bucket_calc (precursor bucket) ──► idlevel_encoder
                                                                      │ 2048-bit HV
                                                                      ▼
                                                              bucket dispatcher
                                                     ┌──────┬──────┼──────┬──────┐
                                                     ▼      ▼      ▼      ▼      ▼
                                                 clustering_kernel  x 5 (one bucket run each)
                                                 distance_unit → nnchain_hac → consensus_unit
                                                     │ dendrogram records      │ labels
                                                     ▼                         ▼
                                               rr_arbiter                 rr_arbiter
```

`spechd_top` wires all of this. Spectra must arrive sorted by precursor m/z
(hence by bucket); the dispatcher collects consecutive spectra of one bucket
into one kernel.

## Number formats

| quantity | format |
|---|---|
| m/z (peak and precursor) | unsigned Q16.16 |
| intensity | 32-bit unsigned integer |
| 1/resolution (`inv_res`) | unsigned Q16.16 |
| distance, threshold `theta` | unsigned Q1.15, normalized Hamming distance: 0x8000 = all bits differ, 0.5 = 0x4000 |
| hypervector | `DHV` bits, default 2048 |

The 16-bit distances follow the published design's 16-bit fixed-point
distance matrix. The exact format is this design's choice. With
`DHV` = 2048 each differing bit is worth 16 LSB.

## Stream beats

`spechd_pkg` defines the structures every block passes on:

- `peak_beat_t`: m/z, intensity, `keep`, `last`, and the spectrum's metadata
  `spec_meta_t` (spectrum id, precursor m/z, charge, bucket). Every peak
  carries its spectrum's metadata, so no block needs a separate header channel.
  `keep = 0` marks a placeholder: a filter that drops the last peak of a
  spectrum still forwards a beat with `last = 1, keep = 0`, so every
  downstream block sees where the spectrum ends.
- `qpeak_beat_t`: the same, with the ID row (`id_idx`) and level row
  (`lv_idx`) in place of m/z and intensity.
- `merge_rec_t`: one dendrogram step (kept index, removed index, linkage
  distance, new size, whether it was below the threshold).
- `label_rec_t`: one spectrum's flat cluster (spectrum id, position in the
  run, cluster head, consensus flag).

All streams use valid/ready. Valid rises independently of ready, and a beat
stays put until it is taken. Assertions in the blocks check the output side
of this rule.

## Preprocessing

**spectra_filter** (combinational) drops peaks within `PREC_TOL` (0.05 m/z)
of the precursor m/z. It also drops peaks outside the encodable m/z range
[`MZ_MIN`, `MZ_MIN + NUM_ID`) = [101, 1501).

**topk_selector** keeps the `TOPK` = 50 most intense peaks. Peaks fill a
128-slot register buffer whose free slots hold intensity 0. At the end of a
spectrum, an iterative bitonic network sorts the buffer into descending
order. It applies one compare-exchange layer per clock: all 64 pairs of a
layer at once, 28 layers for 128 slots. The first min(TOPK, peaks) entries
are then sent out. A spectrum with more than 128 peaks does not overflow:
when the buffer is full it is sorted, its lower half is discarded, and
filling continues. This is exact because TOPK ≤ 64. Cost: one clock per
input peak, 28 clocks per sort (one sort per 64 peaks beyond the first 128),
and one clock per output peak.

**thresholding_normalizer** (combinational, one register for the base peak)
relies on the first beat of each spectrum being its most intense peak. A peak
is dropped if 100·I < I_base, the 1 % rule. The level is
`min(15, floor(16·I / I_base))`, and the ID row is `floor(m/z) − 101`, i.e.
1 m/z bins. Applying the 1 % rule after top-k keeps exactly the same peaks as
applying it before, because the rule is monotone in intensity.

**bucket_calc** (combinational) evaluates
`bucket = floor((m/z − 1.00794) · charge / resolution)`. The division is a
multiplication by the host-supplied Q16.16 reciprocal `inv_res`. The constant
1.00794 is stored as 66056/65536.

## ID-Level encoding

The encoder holds two item memories: `NUM_ID` = 1400 ID hypervectors (one per
m/z bin) and `Q_LEVELS` = 16 level hypervectors (one per intensity level),
each `DHV` bits wide. For every kept peak, the ID row of its m/z bin is XORed
with the level row of its intensity, and the result is added into `DHV`
per-bit counters. At the end of the spectrum, bit b of the output is 1 when
more than half of the peaks set bit b (counter·2 > peaks; a tie gives 0).

The datapath takes one peak per clock, with all 2048 bits in parallel. The
item-memory read takes one clock, and the hypervector is offered two clocks
after the last peak is accepted. A spectrum left without peaks after
filtering produces no hypervector; `empty_drops` counts such spectra.

The host loads both memories through `id_we/id_waddr/id_wdata` and
`lv_we/lv_waddr/lv_wdata` before sending spectra. Their contents decide the
quality of the encoding. The usual choice, used by the end-to-end testbench,
is:

- random ID rows;
- level rows built by progressive flipping: L0 random, and each L(q) is
  L(q−1) with DHV/32 fresh bits flipped, so that near levels are similar.

## Distance matrix

A bucket run of n spectra has a symmetric n×n distance matrix. Only the lower
triangle is stored (`tri_matrix_ram`): pair (r, c) with r > c lives at word
r·(r−1)/2 + c, and both index orders reach it. A 256-spectrum run needs 32640
words of 16 bits.

`distance_unit` fills the matrix row by row. It reads hypervector i into a
register, then streams hypervectors 0 … i−1 from the bucket buffer, one per
clock, through `xor_popcount` (XOR, then a popcount as an adder tree of
64-bit slices, scaled to Q1.15). Buffer reads overlap distance computation, so
a run costs n(n−1)/2 + 2(n−1) + 1 clocks, e.g. 33 131 clocks for n = 256.

Each kernel keeps two copies of the matrix:

- the *working* matrix, which the clustering rewrites as clusters merge;
- the *original* matrix, which the consensus step reads afterwards.

## NN-chain clustering (nnchain_hac)

This is the part that differs most from a textbook HAC, and the one to read
first when changing the design.

**Why NN-chain.** Naive HAC searches the whole matrix for the closest pair
before every merge, O(n³) in total. NN-chain needs only the minimum of one
row at a time. It keeps a chain of clusters, each the nearest neighbour of the
one before. When the top of the chain and the element below it are each
other's nearest neighbours (a reciprocal nearest-neighbour pair, RNN), they
can be merged at once. For linkages that never bring a merged cluster closer
to others than its parts were (complete, single, Ward), this gives the same
dendrogram as naive HAC.

**Loop.** While more than one cluster is active:

1. If the chain (a stack) is empty, push the lowest-numbered active cluster.
2. Scan the row of the top cluster `a`: one matrix read per clock over all
   active k ≠ a, keeping the smallest distance. If the element below `a` on
   the stack is among the closest, it wins the tie; otherwise the lowest index
   wins. This tie rule is what keeps the chain from cycling.
3. If the winner `b` is the element below `a`, pop both and merge them.
   Otherwise push `b` and go to 2.

**Merge.** The higher index folds into the lower one: `i = min(a, b)` stays
and `j = max(a, b)` is switched off. A `merge_rec_t` is emitted; the
controller waits while `merge_ready` is low. For every other active cluster
k, d(i,k) is then rewritten from d(i,k), d(j,k) and d(i,j). That costs two
reads and one write, three clocks per k. The update rule is selected by the
run-time input `linkage`:

| linkage | d(i∪j, k) |
|---|---|
| complete (default, the published design's choice) | max(d_ik, d_jk) |
| single | min(d_ik, d_jk) |
| Ward | ((n_i+n_k)·d_ik + (n_j+n_k)·d_jk − n_k·d_ij) / (n_i+n_j+n_k), saturated to 16 bits |

Ward is applied to the stored distances as they are, not to squared
distances.

**Cost.** Each scan costs about n + 3 clocks, and each merge about
3·(active clusters) + n clocks. About 2n scans and n − 1 merges give roughly
3n² clocks per run: about 200 000 clocks for n = 256.

**Threshold clusters.** Next to the dendrogram, the controller keeps flat
clusters as linked lists of spectra: a count per head, plus a tail pointer
and a next pointer per spectrum. When a merge distance is below `theta`, list
j is appended to list i in O(1); otherwise the two lists stay separate.

This is correct because of how the three linkages behave. The merge
distances along any branch of the dendrogram never decrease. So once a
cluster has merged at a distance ≥ theta, it never merges below theta again.
Every flat cluster therefore stays under the index of the dendrogram cluster
that contains it, and no mapping between the two sets of clusters is needed.
The result equals cutting the finished dendrogram at theta.

Removed clusters are skipped through an active bit per cluster. The cluster
array is not compacted.

## Consensus (consensus_unit)

For each flat cluster, the unit finds the member whose distances to the other
members (read from the *original* matrix) have the smallest sum, i.e. the
lowest average distance. Singletons are their own consensus; on a tie, the
first member in list order wins. The unit then streams one `label_rec_t` per
member, with the cluster's head index and the consensus flag. The cost is
about Σ size² clocks over the clusters, plus one clock per label.

## Kernels and the dispatcher

A `clustering_kernel` owns:

- a buffer of up to `MAX_N` = 256 hypervectors and their spectrum ids;
- the two triangular matrices;
- one `distance_unit`, one `nnchain_hac` and one `consensus_unit`.

While idle, it accepts one hypervector per clock. `start` runs the three
phases one after the other; `busy` stays high until the last label has left.

The dispatcher in `spechd_top` keeps one kernel *open* at a time. An encoded
spectrum of the open bucket is written into the open kernel. The open kernel
is started and the next kernel in round-robin order is opened when any of
these happens:

- a spectrum of another bucket arrives;
- the open kernel is full (256 spectra, a *bucket split*, counted in
  `bucket_splits`);
- `flush` is high while no spectrum is waiting.

If the next kernel is still busy, the encoder output waits and backpressure
reaches the peak input. `stall_cycles` counts those clocks. `theta` and
`linkage` are sampled when a kernel starts, so they may change between runs;
`inv_res` is applied to each spectrum as it passes `bucket_calc`.
Dendrogram records and labels of the five kernels go through two round-robin
arbiters and come out tagged with the kernel number. Labels carry the global
spectrum id, so the host does not need to track which kernel ran which
bucket.

A split bucket is clustered as two independent runs. Its spectra can never
end up in one cluster. Raise `MAX_N` if buckets are large.

## Top-level interface (spechd_top)

| port | dir | meaning |
|---|---|---|
| `pk_valid/pk_ready/pk_beat` | in | raw peaks, `peak_beat_t`, spectra contiguous and sorted by bucket |
| `flush` | in | end of input: start the open kernel once the pipeline is empty |
| `inv_res` | in | 1/resolution, Q16.16 (resolution 0.05 … 1) |
| `theta` | in | flat-cluster threshold, Q1.15 |
| `linkage` | in | `LINK_COMPLETE`, `LINK_SINGLE`, `LINK_WARD` |
| `id_we/id_waddr/id_wdata`, `lv_we/lv_waddr/lv_wdata` | in | item memory load |
| `hv_valid/hv_data/hv_meta` | out | tap of every encoded spectrum (for an external store) |
| `merge_valid/merge_ready/merge_rec/merge_kernel` | out | dendrogram records |
| `lab_valid/lab_ready/lab_rec/lab_kernel` | out | cluster labels and consensus flags |
| `kernel_busy`, `bucket_open` | out | dispatcher state |
| `stall_cycles`, `bucket_splits`, `kernel_runs`, `empty_drops`, `thr_merges_total` | out | event counters |

The reset `rst_n` is asynchronous and active low. There is one clock.

## Parameters

| parameter | default | where the value comes from |
|---|---|---|
| `DHV` | 2048 | published dimensionality |
| `N_KERNELS` | 5 | published configuration: one encoder, five kernels |
| `MAX_N` | 256 | this design's choice (spectra per kernel run) |
| `NUM_ID` | 1400 | this design's choice (1 m/z bins over 101 … 1500) |
| `Q_LEVELS` | 16 | this design's choice |
| `SORT_N` | 128 | this design's choice (top-k buffer) |
| `TOPK` | 50 | this design's choice |
| `MZ_MIN` | 101 | this design's choice |
| `PREC_TOL` | 3277 (0.05 m/z) | this design's choice |

`DHV` must be a power of two between 64 and 32768. `SORT_N` must be a power
of two with `TOPK` ≤ `SORT_N`/2. Memory per kernel at the defaults:
512 Kbit of hypervectors plus 2 × 522 Kbit of distances.

## Where this RTL departs from the published design

- **Platform.** Preprocessing runs inside the SSD in the published system;
  encoded spectra go to HBM and are streamed from there into the kernels.
  Here both are direct streams on one chip, and a kernel holds its bucket in
  a private buffer. The SSD, PCIe/NVMe peer-to-peer path, host, HBM/DDR and
  vendor shell are not modelled.
- **Order of the 1 % rule.** One account puts the 1 % intensity rule in the
  filter before top-k; the block diagram puts thresholding after top-k. The
  RTL follows the diagram, which selects the same peaks.
- **Normalization.** Only named in the source. Linear scaling to the base
  peak is this design's choice, as are the m/z bin width, the level count,
  the precursor tolerance, the m/z range and TOPK.
- **Encoder parallelism.** The published encoder is unrolled across peaks as
  well as bits, with no lane count given. This encoder takes one peak per
  clock.
- **Cluster storage.** The published kernel stores each cluster as an element
  count, an element list and a *correction factor*, and compacts the cluster
  array when a cluster is removed. How the correction factor is computed is
  not described, so it is not built. Lists here are linked lists, and
  removed clusters are skipped with active bits; the threshold-cluster
  argument above is why no correction is needed.
- **Linkage formulas.** The published design names complete, single and Ward
  linkage. The Lance-Williams formulas, Ward on unsquared distances, and the
  run-time selection are this design's choices.
- **Tie rules and start point** of the chain are this design's choices.
- **Consensus.** Described as the member with the "lowest average minimum
  distance" to the rest of its cluster on the original matrix. It is
  implemented as the smallest sum of distances.
- **Scheduling.** The phases of a kernel run one after another. There is no
  overlap between kernels other than the five kernels running in parallel.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/spechd_pkg.sv $(ls rtl/*.sv | grep -v spechd_pkg) tb/tb_nnchain_hac.sv \
    --top-module tb_nnchain_hac -o sim
obj_dir/sim
```

| testbench | what it establishes |
|---|---|
| `tb_spectra_filter`, `tb_thresholding_normalizer`, `tb_bucket_calc` | keep/drop decisions, levels, bins and buckets against real-valued arithmetic |
| `tb_topk_selector` | top-50 in order for spectra of 0 … 300 peaks (buffer overflow included), 28-clock sort latency |
| `tb_idlevel_encoder` | exact hypervectors against a majority computed from the memory contents; 2-clock latency; empty-spectrum drop |
| `tb_xor_popcount`, `tb_tri_matrix_ram`, `tb_distance_unit` | distances, addressing, pair coverage, n(n−1)/2 + 2(n−1) + 1 clocks |
| `tb_nnchain_hac` | with distinct random distances, same merge distances and same threshold partition as naive HAC, complete and single linkage; Ward structure |
| `tb_consensus_unit` | labels and consensus on random partitions |
| `tb_clustering_kernel` | grouped noisy hypervectors: clusters equal the groups, consensus has the minimal summed distance |
| `tb_spechd_top` | end to end at DHV = 512 and MAX_N = 16 |
| `tb_spechd_full` | the same scenario with every parameter at its default |

The end-to-end scenario (`tb/spechd_tb_body.svh`) builds synthetic "peptide"
groups. It checks that clusters equal (group, bucket run) and that each
cluster has one consensus. It also checks that each of these happened at
least once:

- a precursor peak was removed, and a weak peak was removed;
- a spectrum exceeded the top-k buffer, and a spectrum was left empty;
- a bucket was split, and the dispatcher stalled;
- a run used single linkage after the mode switch;
- merges happened both below and above the threshold.

Both end-to-end runs finish in seconds.

## How far to trust it

The individual mechanisms are checked against independent reference models.
NN-chain is compared with naive HAC, which is the strongest check in the set.
The two deciding points of the design are the ones to review when reusing
it:

- the flat-cluster argument, which holds only for monotone linkages;
- the choices listed above where the published description is silent.

Clustering quality on real data depends on what the host loads into the item
memories and on the preprocessing constants. None of that was tuned here.
Timing closure on an FPGA was not studied: several blocks are wide
combinational logic (a 2048-bit popcount, a 128-lane compare-exchange layer,
a divider in the normalizer and one for Ward).
