# Exact k-nearest-neighbour search engine for FPGA

Finding the k vectors of a collection that are closest to a query vector is,
when the answer must be exact, a brute-force job: every query has to be
compared with every vector. This engine does that job in hardware. A set of
distance-computation pipelines compute squared Euclidean distances one memory
word per cycle each, and a *kNN queue*, a chain of simple compare-and-swap
nodes, keeps the k best candidates as the distances stream past. The
collection is never sorted and no index is built.

The same circuit can be used in two ways, chosen at run time without
reconfiguring the FPGA:

* **FQ-SD (fixed queries, streamed dataset)**, for throughput. A batch of up
  to 16 queries is loaded once. The dataset is too large for the device, so
  the host sends it in partitions through a double buffer. Each partition is
  read once and every query is compared with it at the same time. The queue is
  cut into 16 independent queues of k/16 nodes, one per query.
* **FD-SQ (fixed dataset, streamed queries)**, for latency. The dataset is
  resident, split over 16 memory banks. Queries arrive one at a time. All 16
  distance computations work on the same query, each scanning its own bank,
  and their results feed a single queue of k nodes.

The architecture follows the paper "Exact Nearest-Neighbor Search on
Energy-Efficient FPGA Devices" (Dazzi, Guglielmo, Nardini, Perego, Trani). That
paper describes an HLS implementation on a Xilinx Alveo U55C. This
SystemVerilog is an independent register-transfer description of it. The
section "What comes from the paper and what does not" lists where it fills
gaps or departs from the paper.

## Data formats

| item | format |
|---|---|
| vector element | 16-bit signed integer |
| memory word ("beat") | 512 bits = W = 32 elements |
| vector of d elements | r = ceil(d/32) words, zero-padded in the last word |
| distance | 48-bit unsigned squared Euclidean distance |
| vector index | 32-bit global index |
| queue item (`qitem_t`) | `eos`, `sol`, `full` flags + (distance, index) pair |

`eos` marks the end of a stream. `sol` marks a pair as part of the answer.
`full = 0` marks an empty slot, which counts as distance +infinity. The
largest vector supported is `R_MAX` = 128 words = 4096 elements. Queries must
be zero-padded like the vectors, so padding adds nothing to a distance.

## Top-level dataflow

```
 FQ-SD                                          FD-SQ
 host --HW_STREAM--> bank (i mod 2)             host --HW_BANK--> bank 0..15 (once)
           |  double_buffer picks the bank      host --HW_QUERY bcast--> 16 query memories
 partition_streamer (one bank)                  partition_streamer i (bank i)
           |  same word to all 16                         |  one stream each
 distance_computation 0..15 (16 queries)        distance_computation 0..15 (same query)
           |  one stream each                              |
 knn_queue split: 16 queues x 64 nodes          distance_merger --> knn_queue, one queue x 1024
           |                                               |
 queue_writer: slots j*64 .. j*64+63            queue_writer: slots 0..1023
```

`knn_top` instantiates 16 memory banks, 16 streamers, 16 distance
computations, the merger, the queue (1024 nodes + writer) and the double-buffer
controller. `cfg_mode` only switches multiplexers:

* where each distance computation takes its words from: the shared double-buffer
  bank, or its own bank;
* where the queue takes its items from: each computation into its own segment,
  or the merger into segment 0;
* whether the queue segments are chained.

## Computing a distance in three pipelines

`distance_computation` holds its query in a small local memory (`R_MAX`
words). For each incoming vector word it reads the matching query word.
Three pipelines then do the work, as the paper splits it:

1. **partial_distance**: for one word, `sum over 32 elements of (q-x)^2`. The
   partial goes into a shift-register array A of m = 8 entries. When 8
   partials are collected, or the vector ends, a copy of A is sent on and A is
   cleared. Unused entries of a short final array stay zero.
2. **vector_adder**: `B = B + A` for each array of the vector. After the
   vector's last array it sends B on and clears it. That is r' = ceil(r/8)
   activations per vector.
3. **full_adder**: the 8 entries of B are summed into the distance. It is
   emitted with the vector's index as a queue item.

The reason for the split in the original HLS design is resource use. The
wide, costly step (32 squares) runs once per word. The accumulation step is
only m = 8 wide. The final reduction runs once per vector.

Timing: one word per cycle, no back-pressure, and gaps are allowed. A
vector's pair leaves 4 cycles after its last word: query read, then one cycle
per pipeline. An end-of-stream token follows the same path, so it leaves after
the vector's pair.

## The kNN queue

This is the part that is least obvious. The queue is a linear pipeline, not a
tree heap:

```
 reader -> node 1 -> node 2 -> ... -> node k -> writer
```

Each `queue_node` stores one pair and reacts to one item per cycle:

| input item | node holds | action | output |
|---|---|---|---|
| pair, not a solution | nothing | store it | nothing |
| pair, not a solution | a pair with a larger distance | store the new pair (operation A) | the old pair |
| pair, not a solution | a pair with smaller or equal distance | keep its pair (operation B) | the new pair |
| pair marked solution | anything | store the new pair, without comparing | its old pair, marked solution |
| end-of-stream | anything | become empty | its pair, marked solution; the next cycle, end-of-stream |

While a stream flows, node 1 keeps the smallest distance seen so far. Every
larger distance passes on to node 2, which keeps the smallest of those, and so
on. After the stream, node i holds the i-th nearest vector. Pairs that fall
off the end of node k are not among the k best. The writer drops them.

**Draining.** The end-of-stream marker turns the chain into a shift register
towards the writer:

```
 cycle   node1 out      node2 out      node3 out
 t+1     sol(p1)
 t+2     eos            sol(p2)
 t+3                    sol(p1)        sol(p3)
 t+4                    eos            sol(p2)
 t+5                                   sol(p1)
 t+6                                   eos
```

Node n emits n solutions, from the largest distance down to the smallest, then
the end-of-stream marker. The writer therefore receives the k-th nearest first
and the nearest last. It stores them in reverse order of arrival, so the
result array is sorted by increasing distance.

Each node adds one cycle to the end-of-stream marker. The node also needs
that cycle to send its own solution, and its input is idle in that cycle (an
assertion checks this). As a result, a complete result is ready about 2k
cycles after the stream's end-of-stream item enters. For k = 1024 that is
about 2050 cycles.

**Empty nodes.** If fewer than k vectors were seen, the last nodes stay empty.
They still emit a solution item at the end, with `full = 0`, so result slots
keep their positions. An empty node that stores its first pair emits nothing.

**Ties.** A new pair replaces the stored one only if its distance is strictly
smaller. Among equal distances the result order is therefore not defined.

**Splitting.** The 1024 nodes are cut into 16 segments of 64. With
`split = 1`, the first node of segment j takes its input from reader j, and
the last node of segment j feeds write bank j. This gives 16 independent
queues with k = 64. With `split = 0` the segments are chained into one queue
with k = 1024, and only the last tap is stored. The writer is banked by
segment, so all 16 queues can store a result in the same cycle. A stream
cannot be stopped once it is in the queue. A new stream may start only after
`done`.

## Feeding the engine

**Memory banks (`partition_mem`).** There are 16 banks of 8192 x 512 bits,
with one write port from the host and one read port with one-cycle latency. On
the original board the banks are HBM; here they are on-chip arrays. Vectors
are stored back to back, r words each, from word 0.

**Double buffer (`double_buffer`).** This is for FQ-SD. Partition i goes to
bank i mod 2, so the host fills one bank while the engine reads the other. The
controller keeps a full flag, a vector count, the index of the first vector
and a last flag for each bank. The host may write a bank only while
`hw_stream_ready` is high. It then hands the bank over with `commit`. The
engine releases the bank when its streamer has read it. The host can commit
two partitions before it starts a run.

**Partition streamer.** Reads `nvec * r` words of a bank in order. It tags
each word with its position in the vector, the vector's global index and a
last-word flag, and can append an end-of-stream word. It sends one word per
cycle unless `stall` is high.

**Merger (`distance_merger`).** This is for FD-SQ. The queue accepts one pair
per cycle, but 16 distance computations produce up to 16/r pairs per cycle.
Each input has a 16-entry FIFO, and pairs are taken in round-robin order. When
a FIFO holds 8 or more items, its streamer is stalled. The 8 free entries
absorb what is still in flight: up to 5 pipeline stages. Once all 16 inputs
have delivered their end-of-stream, the merger sends one end-of-stream item.
With r >= 16 (any vector longer than 480 elements) the merger never stalls.
With short vectors the merger limits the rate to one vector per cycle.

## Programming sequence

All host traffic goes through one write port: `hw_valid`, `hw_dest`,
`hw_sel`, `hw_bcast`, `hw_addr` and `hw_data`, one word per cycle.

FQ-SD:
1. Write query j, words 0..r-1, with `HW_QUERY`, `hw_sel = j`. In
   single-query mode only query 0 is used.
2. For each partition, wait for `hw_stream_ready`. Write its words with
   `HW_STREAM`, then pulse `commit` with `commit_nvec`. Set `commit_last` on
   the final partition.
3. Pulse `start` with `cfg_mode = MODE_FQSD`, `cfg_split` and `cfg_r = r`.
   This can be done before, between or after the first two commits.
4. Wait for `done`. Read the results: query j's k = 64 neighbours are at
   `res_rd_addr` = 64j .. 64j+63, nearest first, with `split = 1`; otherwise
   the 1024 neighbours of query 0 are at 0..1023.

FD-SQ:
1. Once per dataset, write bank i with `HW_BANK`, `hw_sel = i`, and its
   vector count with `HW_NVEC`. Global indices number bank 0's vectors first,
   then bank 1's, and so on.
2. For each query, write it to all query memories with `HW_QUERY` and
   `hw_bcast = 1`. Pulse `start` with `cfg_mode = MODE_FDSQ`, wait for
   `done`, and read slots 0..1023.

The result item has `full = 0` where there was no vector to fill a slot.

## Performance at default size

* FD-SQ query time is about `max(nvec per bank * r, total vectors) + 2k`
  cycles. For 15 banks of 80 vectors of 769 elements (r = 25), the simulated
  query took 4075 cycles: 2000 to stream, plus about 2050 to drain the
  queue.
* FQ-SD reads one word per cycle and compares it against 16 queries at once.
  A partition of n vectors takes n * r cycles. The drain is paid once per
  batch.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `knn_top.P_P` | 16 | distance computations, banks and queue segments (the "workers" of the paper's main configuration) |
| `knn_top.K_P` | 1024 | queue nodes: cutoff k of the whole queue; k/P_P per query in FQ-SD batch mode |
| `knn_top.DEPTH_P` | 8192 | words per bank |
| `knn_top.R_MAX_P` | 128 | maximum words per vector (4096 elements) |
| `knn_top.FIFO_P` | 16 | merger FIFO depth per input |
| `knn_pkg.ELEM_W`, `BUS_W` | 16, 512 | element and word width |
| `knn_pkg.M_ACC` | 8 | partials per array A (m) |

`K_P` must be a multiple of `P_P`. The paper also trades instances against k
by rebuilding: 19, 22 and 24 instances with smaller k. Those builds use
`P_P = 19/22/24` with `K_P = 418/220/72`.

## Sizes the design holds

At default parameters, with paper dataset sizes:

* **FQ-SD runs all three evaluated collections.** GIST has 1M x 960 elements,
  YFCC100M-HNfc6 has 100M x 4096, and MS-MARCO has 8.8M x 769. Vectors of up
  to 4096 elements fit (r <= 128), a partition holds 8192/r vectors per bank,
  and indices fit in 32 bits.
* **FD-SQ holds only 131,072 words on chip.** That is 5,242 vectors of 769
  elements, far below any of the three collections. The original keeps the
  resident dataset in 16 GiB of HBM. With 16-bit elements MS-MARCO would need
  14.1 GB there. Larger banks are a matter of `DEPTH_P` and of putting
  external memory behind `partition_mem`'s ports.

## What comes from the paper and what does not

From the paper:

* the two run-time configurations on one circuit;
* M queries against a streamed dataset with a queue split into M parts of k/M,
  and N partitions with N distance computations and one common queue;
* the bank (i mod 2) double buffer;
* the three-pipeline distance computation with m = 8;
* the queue node's operations A/B, solution marking and two-phase termination;
* the reader and the reversed-order writer;
* the main configuration of 16 instances and k = 1024 (64 per query in batch
  mode).

This design's own choices, where the paper gives no detail:

* integer 16-bit elements (the paper gives no number format) and the 512-bit
  word;
* one query memory per distance computation;
* closing arrays with a last-word flag instead of counting r';
* the empty-node convention and the empty-slot solution items;
* on-chip result storage with a read port;
* the merger's FIFOs, round-robin order and stall;
* the host write protocol, the commit handshake and all cycle timing;
* bank size 8192 words;
* synchronous active-high reset.

Left out, because the paper does not design them:

* the host software;
* the PCIe link, which is represented by the host ports;
* the HBM memory and its controllers, which are represented by the
  `partition_mem` arrays.

Inconsistencies in the paper:

* Its FQ-SD figure draws "Node 1 ... Node K" inside every per-query queue,
  while the text gives k/M nodes per queue. This design follows the text.
* Its FD-SQ figure numbers the result transfer arrow 6 while the text calls it
  arrow 5. This has no effect on the logic.
* The introduction speaks of up to 4,960 dimensions while the dataset table
  stops at 4,096. `R_MAX` covers 4,096.

## Verification

Each module has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=N failures=F` and stops itself with a watchdog. Reference
values are computed inside the testbench: squared distances in 64-bit
arithmetic, top-k by sorting.

| testbench | what it establishes |
|---|---|
| `tb_partial_distance` | partial sums, grouping by m, zero padding, 1-cycle latency, extreme values |
| `tb_vector_adder`, `tb_full_adder` | accumulation and clear, final sum, latency |
| `tb_distance_computation` | distances for random vectors with gaps, 4-cycle latency, query reload |
| `tb_queue_node` | operations A and B, ties, solution swap, two-phase termination, reuse |
| `tb_queue_writer` | reversed storage, split and whole layouts, simultaneous writes, done flags |
| `tb_knn_queue` | top-k against a sort for random streams with ties, fewer than k pairs, 4 split queues at once, drain time |
| `tb_partition_mem`, `tb_partition_streamer`, `tb_double_buffer`, `tb_distance_merger` | memory behaviour, word/index/last tagging under stall, bank alternation and waits, merging with order, stall and single end marker |
| `tb_knn_top` | whole engine at 4 instances / k = 16: FQ-SD split and single, FD-SQ several queries; counts that stalls, double-buffer waits, bank alternation and empty slots all occur |
| `tb_knn_top_full` | whole engine at default size with 769-element vectors: FQ-SD 16 x k=64 and 1 x k=1024, FD-SQ over 1200 vectors, every slot checked |
| `tb_knn_top_workloads` | whole engine at default size with the other two evaluated vector lengths: FQ-SD with 4096-element vectors (the longest a query memory holds), FD-SQ with 960-element vectors and two queries in a row |

`tb/knn_host_model.sv` is the behavioural host used by the three end-to-end
testbenches. It generates the data, drives the ports and checks the results.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/knn_pkg.sv rtl/*.sv \
    tb/knn_host_model.sv tb/tb_knn_top.sv --top-module tb_knn_top
./obj_dir/Vtb_knn_top
```

For a unit testbench, replace the last two files with `tb/tb_<module>.sv` and
set `--top-module` to match. `tb_knn_top_full` and `tb_knn_top_workloads` each run in under a minute.

Not verified:

* timing closure or resource use on an FPGA;
* behaviour with real HBM latencies;
* float data;
* the 19/22/24-instance builds, which are only parameter changes.
