# V-Rex core: RTL for dynamic KV cache retrieval in streaming video LLMs

A streaming video LLM re-runs prefill for every new frame, and its KV cache
grows with every frame until it no longer fits next to the model. The V-Rex
approach keeps only recent KV entries in accelerator memory, pushes older ones
out to host memory or SSD, and before each layer brings back only the entries
that matter for the current queries. Choosing "what matters" cheaply is the hard
part, and the retrieval algorithm (ReSV) does it in two steps:

1. **Hash-bit key clustering.** Every key is projected onto `N_hp = 32` random
   hyperplanes and reduced to 32 sign bits. A token whose Hamming distance to an
   existing cluster is below a threshold joins that cluster; otherwise it opens a
   new one. Similar tokens of consecutive frames thus collapse into one cluster.
2. **WiCSum thresholding.** The queries are scored against one representative
   key per cluster. For each query row, clusters are taken from the highest
   score down, weighted by their token counts, until the accumulated weighted
   score exceeds a fixed fraction `Th_r-wics` of the row's total. The union of
   the selected clusters over all rows is fetched.

This repository gives synthesizable SystemVerilog for one V-Rex core: the LLM
execution engine (a dot product engine and a vector engine) and the dynamic
retrieval engine (hash-bit cluster unit, WiCSum threshold unit, KV management
unit), wired in the order of the algorithm.

## Data flow through one core

```
   keys, hyperplanes        queries, cluster keys
          |                        |
        [DPE] --> [VPE] sign   [DPE] --> [VPE] quantise
                    |                        |
              32-bit hash-bits          Q8.8 scores, 16 per row
                    v                        v
                  [HCU]                  [WTU cores] -- bitmasks --> [aggregator]
          cluster records (HC table)                                  |
                    v                                        selected clusters
                  [KVMU] <------------------------------------------- +
                    |
          transfer commands: recent write / offload / prefetch burst
```

`vrex_core` is the top. Off-chip memory, the PCIe link and the LXE's own
instruction controller and on-chip memory are not part of it; their signals are
ports (`dpe_*`/`vpe_*` operand streams, `hc_ld_*` cluster table preload,
`hc_upd_*` cluster table writes, `dma_*` transfer commands).

## The engines

### LXE: `dpe`, `vpe`, `lxe`

`dpe` has `N_DPE_H x N_DPE_W = 64 x 64` BF16 multipliers. Each beat multiplies a
64-element vector with 64 matrix rows; products are summed by an FP32 adder tree
per row and accumulated over beats until `in_last`. The result appears two
cycles after the last beat, in FP32 and rounded to BF16. `vpe` is 64 lanes wide
with four operations: add, multiply, sign (the hash-bit: 1 only for values
strictly greater than zero, so +0 and -0 give 0) and quantise (BF16 to unsigned
Q8.8, negatives to 0, saturating). `lxe` chains them: a finished dot product
takes the VPE (the direct VPE port sees `vpe_in_ready` low in that cycle) with
the operation chosen on the first beat, so a DPE result leaves the LXE three
cycles after its last beat.

The arithmetic format inside the DPE (FP32 accumulation, round to nearest even,
subnormals flushed) and the VPE operation set are choices of this design; the
published description only says both engines work in BF16.

### HCU: hash-bit clustering (`hcu`)

The HCU holds the current frame's hash-bits (32 tokens x 32 bits, the 128-byte
memory) and up to 1024 cluster hash-bits with their token counts (the 4 KB
memory). For each token it streams the cluster table through `N_HCU_W = 16`-bit
XOR and popcount slices (`N_HCU_H` clusters in parallel), keeping the nearest
cluster whose count is below `cluster_cap`. Then:

* distance `< th_hd` (default 7): the token joins that cluster, count + 1;
* otherwise a new cluster is opened with the token's hash-bits, so later tokens
  of the same frame can join it;
* if the table is full, the token joins the nearest cluster regardless of
  distance and capacity, and `overflow` is set.

Each decision is sent as an `hc_update_t` record (new flag, cluster, token,
count, cluster hash-bits) over a valid/ready port; back-pressure stalls the
HCU. Cost per token: `ceil(clusters / N_HCU_H) * 32 / N_HCU_W + 2` cycles.

A cluster keeps the hash-bits of its first token. The representative key
(the average of member keys) is not formed here; the LXE can build it from the
cluster records.

### WTU: early-exit WiCSum (`wtu_core`, `wtu_aggregator`, `wtu`)

This is the least obvious unit. Sorting all scores of a row would be slow, so
each core works with score ranges instead:

1. **Preprocess** (one pass over the row, 16 scores per cycle): weighted sum
   `Sum = sum(score x count)`, minimum, maximum, and `Th = Sum x Th_r-wics`
   (`ratio` in Q0.16; 0.3 is 19661).
2. **Bucket passes.** `[min, max]` is split into `NUM_BUCKETS = 16` buckets of
   width `((max - min) >> 4) + 1`. Starting with the top bucket, the upper and
   lower sorters mark every score inside the bucket (a 16-bit mask per row
   chunk), the multipliers and adder tree add `score x count` of the marked
   clusters to `Acc`, and the masks go to the aggregator. After a pass, if
   `Acc > Th` the core stops (`early_exit` if lower buckets remained);
   otherwise the range moves down one bucket.

A bucket is taken whole, so the selection can hold a few more clusters than an
exact sorted walk would; it never holds fewer. Cycles from `start` to `done`:
`nch + 3 + buckets x (nch + 2)`, with `nch = ceil(n_cl / 16)`.

The aggregator ORs the masks of all cores into one 1024-bit vector. On `emit`
it sends the set indices in ascending order over a valid/ready stream and
counts them; `emit_done` marks the end.

### KVMU: where KV entries live (`kvmu`)

The KVMU does not move data itself; it issues transfer commands (`op`, `src`,
`dst`, `len` in entries) to an external DMA engine:

* **Reorder and write.** The records of one frame are buffered and written to
  the recent ring grouped by cluster index (stable within a cluster), one
  `DMA_WRITE_RECENT` per entry.
* **Offload.** When the ring (`RECENT_CAP = 4096` entries) is full, each write
  is preceded by a `DMA_OFFLOAD` of the oldest entry to its cluster's region in
  host memory: address `cluster x CLUSTER_SLOTS + (count - 1)`, so members of a
  cluster sit at consecutive addresses.
* **Prefetch.** For each selected cluster with offloaded entries, one
  `DMA_PREFETCH` burst of exactly that many entries brings them into the
  retrieval buffer (`RETR_CAP` entries after the ring, wrapping to its start
  when a burst would cross its end). Clusters with nothing offloaded are
  skipped (`n_prefetch_skip`).

The per-cluster offload counters are cleared by a sweep of 1024 cycles after
reset; records are not accepted until it has finished.

### Top: `vrex_core`

Hash-bit results of the LXE (`post_op = VPE_SIGN`) are written one token per
result into the HCU's current memory. Score results (`post_op = VPE_QUANT`) are
split into `N_VPE_W / N_WTU_W` rows of 16 and written to the WTU core chosen by
`wtu_core_sel`, starting at row 0 after `score_ptr_clear`; while this happens
`score_busy` is high and a new score result must not arrive (an assertion
checks it). `hcu_done` closes the KVMU's frame, and the aggregator's index
stream feeds the KVMU's prefetch.

## Parameters

| parameter | default | origin |
|---|---|---|
| `N_DPE_H`, `N_DPE_W` | 64, 64 | published configuration |
| `N_VPE_W` | 64 | published configuration |
| `N_HCU_H`, `N_HCU_W` | 1, 16 | published configuration |
| `N_WTU_H`, `N_WTU_W` | 1, 16 | published configuration |
| `N_HP`, `TH_HD_DEF` | 32, 7 | published evaluation settings |
| `CUR_TOKENS`, `MAX_CLUSTERS` | 32, 1024 | from the 128 B and 4 KB hash-bit memories |
| `SCORE_DEPTH`, `TC_DEPTH` | 4096, 4096 | from the 8 KB score and token-count memories, 16-bit entries |
| `NUM_BUCKETS` | 16 | this design |
| `RECENT_CAP`, `RETR_CAP`, `CLUSTER_SLOTS` | 4096, 4096, 128 | this design |

Shared types and constants are in `vrex_pkg` (record and command structs,
widths) and `vrex_fp_pkg` (BF16/FP32 arithmetic functions).

## How far it can be trusted

Every block has a self-checking testbench that compares against a reference
written independently in the testbench:

| testbench | what it checks |
|---|---|
| `tb_dpe` | full size, random BF16 dot products of 1-3 beats against a real-valued reference, 2-cycle latency |
| `tb_vpe` | all four operations, zero and negative-zero lanes |
| `tb_lxe` | full size, exact integer dot products through every post operation, 3-cycle latency, VPE port priority |
| `tb_hcu` | nearest-cluster model over several frames, thresholds 0 and 33, small capacity, full table, back-pressure, cycle count |
| `tb_wtu_core` | the worked example of the WiCSum figure (ratio 0.8: sum 95, threshold 76, stop at 81 after selecting the three highest scores) and random rows against a bucket model, cycle count |
| `tb_wtu` | two cores, three heads, union of selections, random back-pressure |
| `tb_kvmu` | ring, offload addresses, contiguous regions, prefetch bursts and skips |
| `tb_vrex_core` | end to end at reduced size (32x16 DPE, two WTU cores, 32-entry ring): hash-bits, cluster records, all transfer commands and selections checked; counts new clusters, joins, full table, HCU stalls, command back-pressure, offloads, prefetches, skips, score port busy and early exits, and fails if any never happened |
| `tb_vrex_core_full` | the same flow with every parameter at its default; the 4096-entry ring does not fill in two frames, so offload and prefetch are left to the reduced run |

To run one with plain Verilator:

```
verilator --binary --timing --assert rtl/vrex_fp_pkg.sv rtl/vrex_pkg.sv \
  rtl/dpe.sv rtl/vpe.sv rtl/lxe.sv rtl/hcu.sv rtl/wtu_core.sv \
  rtl/wtu_aggregator.sv rtl/wtu.sv rtl/kvmu.sv rtl/vrex_core.sv \
  tb/tb_vrex_core.sv --top-module tb_vrex_core -Mdir obj
./obj/Vtb_vrex_core
```

Each prints `TB_RESULT checks=N failures=M`. The full-size DPE makes the
C++ build take about half a minute.

## Departures and open points

* **Threshold name.** The algorithm description calls the Hamming threshold
  `Th_hp`, the hardware description `Th_hd`; they are treated as one value.
* **What is not here.** The LXE's controller and 384 KB on-chip memory, the
  DRAM and PCIe interfaces, and the arrangement of 8 or 48 cores. Work
  partitioning across cores is left to the user of the core.
* **Capacity.** 1024 clusters per pass. At the published average of 32
  tokens per cluster this covers about 32K tokens per head; a 40K-token cache
  needs about 1250 clusters and so does not fit one pass.
* **Frames larger than 32 tokens** are clustered in chunks of 32, and the KVMU
  reorders within a chunk rather than within a whole frame.
* **Bucket count, ring sizes and cluster region size** are not published; the
  defaults above are guesses sized to the on-chip memories.
* **Cluster hash-bits** are not updated when tokens join, and no averaged
  cluster key is formed in hardware.
* **Circuit warnings left standing:** the assertions' `disable iff (!rst_n)`
  makes the reset feed both asynchronous flops and assertion logic; some
  outputs of the DPE (FP32 result) and of the WTU cores (sum, threshold, range)
  are unused inside the top and left open on purpose.
