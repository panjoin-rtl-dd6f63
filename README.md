# BI-Sort worker node: a sorted, indexed subwindow for band stream joins

A sliding-window stream join matches every arriving tuple of one stream
against the recent tuples of the other stream. When the join condition is
a band, `s.value BETWEEN r.value - eps AND r.value + eps` (an equi-join is
the band with `eps = 0`), a hash table does not help. What helps is keeping
the window **sorted by join value**: then the answer for one probe tuple is
one contiguous run of the sorted array, and it can be returned as two
numbers, `<id_start, id_end>`, whatever the number of matches.

The window is cut by arrival time into *subwindows*. A manager (software,
not included here) sorts incoming tuples into batches and sends commands to
worker nodes, each of which holds subwindows. This repository holds the
SystemVerilog of one such worker node for FPGA. It keeps one subwindow of up
to `N_SUB` tuples (8M by default) in external memory in the **BI-Sort**
layout (Buffered, Indexed Sort):

* the **main array**: all tuples of the subwindow, sorted by value;
* the **index array**: `P` samples of the main array (64K by default), entry
  `p` holding the value of the tuple at position `floor(p*M/P)`, where `M` is
  the current subwindow length. It lives in on-chip RAM. The span between two
  samples is a *partition*.

Inserting a sorted batch is a merge of two sorted arrays, which streams
through memory at one tuple per cycle per merger. Probing a sorted batch
first finds, for each bound, where in the index to start, then scans the
main array once. Both operations read memory only as long sequential
streams, apart from a few seeks.

## Commands and status

The worker takes one command at a time on a valid/ready port (`cmd_valid`,
`cmd_ready`, `cmd` of type `cmd_t`) and pulses `done` when it has finished.

| `cmd.op`    | fields used                                  | effect |
|-------------|----------------------------------------------|--------|
| `OP_CREATE` | none                                         | subwindow becomes empty (`M = 0`) |
| `OP_INSERT` | `batch_addr`, `batch_len`                    | merge the sorted batch into the main array, rebuild the index |
| `OP_PROBE`  | `batch_addr`, `batch_len`, `eps`, `scratch_addr`, `res_addr` | write one result record per probe tuple |
| `OP_EXPIRE` | none                                         | subwindow becomes empty. A subwindow expires as a whole, never tuple by tuple |

Status outputs:

* `sub_len` is `M`;
* `sub_empty` is `M == 0`;
* `sub_full` is `M >= N_SUB`;
* `main_base` is the address where the main array currently starts;
* `prober_seek[k]` pulses when prober `k` restarts its main-array stream. It is for observation.

The manager uses the status bits to decide when to open a new subwindow. An
insertion must satisfy `M + batch_len <= N_SUB`, and an assertion checks this.

### Data format

Memory words are 64 bits: `{key[63:32], value[31:0]}`. The join value is the
low 32 bits, compared as unsigned. The key is carried along untouched. The
constants and types are in `rtl/bisort_pkg.sv`:

* 64-bit words;
* 30-bit word addresses, so 8 GiB;
* 32-bit positions.

Batches must be sorted by value before they are written to memory. That is
the manager's job.

### Result records

For probe tuple `j` with value `v`:

* `res_addr + j` receives `id_start`, the number of main-array tuples with
  value `< v - eps`;
* `res_addr + batch_len + j` receives `id_end`, the number with value `<= v + eps`.

The matches are main-array positions `id_start <= i < id_end`, counted from
`main_base`. The end is exclusive, so an empty result has
`id_start == id_end`. Both bounds saturate at 0 and `2^32 - 1`.

The records refer to positions in the main array as it is at the moment of
the probe. To turn them into tuples, the manager keeps its own copy of each
subwindow's main array and applies the same insertions to it.

## Memory layout

The worker owns two regions of `N_SUB` words each, `MAIN0_BASE` (0) and
`MAIN1_BASE` (`N_SUB`). The main array lives in one of them. Each insertion
reads it from there and writes the merged result to the other region, so the
two regions swap roles after every insertion. `main_base` says which region
is current.

The other areas are placed by each command:

* the batch;
* a probe's scratch area of `3 * batch_len` words;
* a probe's result area of `2 * batch_len` words.

These areas must not overlap the two main-array regions.

The design has two memory channels, like the DDR3 board it was sized for:

* `ddr_rd_*` and `ddr_wr_*` are arrays of two plain request ports;
* a read request is taken when `valid && ready`;
* each channel must answer reads in order with `ddr_rd_rsp_valid`, without back-pressure;
* a write is done when `valid && ready`.

A memory controller and a DDR3 device are not included.

## Insertion engine

An insertion merges the main array `A` (length `M`) with the batch `B`
(length `N`) into the other region. It has three steps:

1. **Split** (`merge_splitter`). The output is cut into `NM` equal pieces,
   with `NM = 8` by default. For the output position `d_k = floor(k*(M+N)/NM)`
   a binary search finds `a_k`, the number of tuples among the first `d_k`
   merged tuples that come from `A`. This is the co-rank, or "merge path",
   method. The search keeps the tie rule of the mergers: when values are
   equal, the `A` tuple comes first. Each search step costs two memory
   reads. There are about `log2(M)` steps per cut and `NM-1` cuts, which is
   negligible next to the merge.
2. **Merge** (`merger`, `NM` copies running at once). Merger `k` merges
   `A[a_k, a_{k+1})` with `B[b_k, b_{k+1})` and writes the result to output
   positions `[d_k, d_{k+1})`. Each merger has:
   * two `stream_reader`s, which issue sequential reads and keep a small
     FIFO (`BUF_DEPTH`) topped up;
   * one comparator (`B < A` takes the batch tuple, so ties keep `A` first).

   It writes one tuple per cycle whenever both streams have data.
3. **Index** (`indexer`). It reads the `P` sampled tuples of the new array
   and writes `{position, value}` into `index_ram`. Positions `floor(p*M/P)`
   come from a running sum of `M` shifted right by `log2 P`, so no
   multiplier or divider is needed. The index RAM also keeps the position
   of each sample. The original design keeps only values, so this is a
   convenience that costs on-chip RAM.

After `done`, `M` grows by `N`, the regions swap, and the next command may
start.

## Probing engine

A probe of `L` sorted tuples runs three phases, one after the other. The
hand-over between phases is through memory, in the scratch area.

1. **Bounds** (`boundary_generator`). For each probe tuple it writes
   `{hi, lo} = {v+eps, v-eps}`, saturated, to `scratch + j`. Since the batch
   is sorted, both the `lo` sequence and the `hi` sequence are sorted.
2. **Partitions** (`partitioner`, two copies). One takes the lower bounds
   and one the upper bounds. For each bound it looks in the index for the
   last partition whose first sample is below the bound: strictly below for
   lower bounds, not above for upper bounds. The first matching tuple cannot
   lie before the start of that partition. It writes that partition's start
   position to `scratch + L + j` (lower) or `scratch + 2L + j` (upper).

   The search is a **rebounding binary search**, which exploits that the bounds
   are sorted: each search starts at the previous bound's answer.
   * The forward phase strides ahead, doubling the step while the sample
     is still below the bound.
   * The backward phase binary-searches the last stride.

   A run of close bounds thus costs a few index reads each, not `log2 P`.
   The index RAM has registered reads, so each step takes two cycles.
3. **Probe** (`prober`, `NPR = 8` copies).
   * Probers `0 .. NPR/2-1` handle lower bounds and the rest handle upper
     bounds.
   * Within each half, the batch is cut into `NPR/2` equal contiguous slices.
   * A prober streams its bounds and targets, and streams the main array
     from the first target on.
   * A tuple *meets* a lower bound if `value >= lo` and an upper bound if
     `value > hi`.
   * While the current tuple does not meet the current bound, the prober
     takes the next tuple. When it does, the prober writes the tuple's
     position as the result and takes the next bound, keeping the tuple.
   * A bound past the last tuple gets `M`.
   * When a bound's target partition starts beyond the tuple at hand, the
     prober drops its read-ahead and re-opens the main-array stream there.
     This is a *seek*.

   So each main-array tuple is read at most once per prober. A long run of
   probe tuples with no partners costs only index work and seeks, not a scan.

An equi-join is the case `eps = 0`. Its range `[v, v]` is the same as the
half-open range from `v` to the next larger value, so duplicates of `v`
spread over several partitions are all found.

## Sharing the memory channels

Every engine unit is a memory client of its own:

* insertion engine: `2*NM + 2` read clients and `NM` write clients;
* probing engine: `3 + 3*NPR` read clients and `3 + NPR` write clients.

Client `i` is wired to channel `i mod 2`, and on each channel a
`mem_arbiter` grants one read and one write per cycle, round-robin. A
channel answers reads in order, so the arbiter pushes the client number of
every granted read into a tag FIFO and steers each answer to the client at
the head of it. When `MAX_OUT` reads are in flight it stops granting reads.

On the client side, each `stream_reader` issues a read only when its FIFO
has room for the answer (credits). It therefore never needs back-pressure
on answers. When it is restarted mid-stream (a seek), it counts the answers
still on their way and discards them.

With the ideal memory of the testbenches, one merger alone merges at one
tuple per cycle after a start-up of about the memory latency.

## Parameters

| parameter    | default  | meaning |
|--------------|----------|---------|
| `N_SUB`      | 8M       | subwindow capacity, in tuples |
| `NM`         | 8        | mergers, a power of two |
| `NPR`        | 8        | probers, even |
| `LOG2P`      | 16       | `P = 2^LOG2P` index entries (partitions) |
| `BUF_DEPTH`  | 8        | stream FIFO depth per stream |
| `MAX_OUT`    | 64       | reads in flight per channel |
| `MAIN0_BASE`, `MAIN1_BASE` | 0, `N_SUB` | the two main-array regions |

The defaults are the configuration of the reference FPGA build. It used:

* 8M-tuple subwindows and `P` = 64K;
* 8 mergers and 8 probers, a count at which the two DDR3-1066 channels were
  reported saturated;
* a Terasic DE5a-Net (Arria 10) board, at 252.7 MHz.

At the defaults, the index RAM is 64K x 64 bits (4 Mbit) of block RAM.
Everything else is a few thousand flip-flops, and no multipliers are used.

## Where this design departs from the original

The original worker was written in OpenCL. This version follows its block
structure: an insertion engine with mergers and an indexer, a probing
engine with a boundary generator, partitioners and probers, on-board
memory, and the behaviour of each unit. Its own choices are these:

* **No insertion buffer.** The original keeps small batches unsorted in a
  buffer and merges only when the buffer is full. It also probes the buffer
  by a linear scan. How an FPGA version would hold and sort that buffer is
  not described. Here every batch is merged directly, which the original
  does for batches larger than the buffer.
* **How merges are split** across mergers (co-rank search), **how probes
  are split** across probers (equal slices of the batch, lower and upper
  bounds on separate probers), and the **number of partitioners** (two)
  are not specified in the original.
  * The original CPU version divides probe work by the number of partitions
    to be scanned, not by batch tuples.
  * Equal batch slices can leave probers unevenly loaded when the batch is
    skewed.
* **Phases talk through memory.** Bounds and targets are written to a
  scratch area, because the original units are described as streams to and
  from external memory.
* **Ping-pong regions** for the main array, and an **arbiter** for each
  memory channel. Neither is described in the original.
* **Result format.** `id_end` is exclusive. Records are written as two
  arrays (all starts, then all ends), not as pairs.
* **Not built:**
  * the `!=` condition (the complement of the equi-join record, which the
    manager can form);
  * multi-band conditions (one probe command per band);
  * filtering of expired tuples, and time-based windows. Both are manager
    functions.
* **Not built at all:** the manager node, network or host I/O, the memory
  controller and DDR3.

## Simulating

All testbenches are self-checking. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops. Any Verilator 5 works:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
  rtl/bisort_pkg.sv tb/tb_bisort_worker.sv --top-module tb_bisort_worker
./obj_dir/Vtb_bisort_worker
```

`tb/ddr3_model.sv` is an ideal memory for simulation:

* fixed read latency;
* answers in order;
* optional random stalls on `ready`;
* a sparse array.

Testbenches fill and inspect it through its `mem_write` and `mem_read`
functions.

| testbench | what it covers |
|-----------|----------------|
| `tb_bisort_worker` | the whole worker, small size (`N_SUB` = 4096, `P` = 64). Random inserts until full, band and equi probes, heavy duplicates, memory stalls, expire and re-create. Counts each mechanism (merge, index, band, equi, seek, stall, full, expire) and fails if any never happened |
| `tb_bisort_worker_full` | the worker at its default parameters: inserts, band probes, index check |
| `tb_bisort_workload` | default parameters, the evaluation pattern of the original design. Inserts batches of 1K, 8K, 64K, 512K and 4M, then equi-join probes of 1K to 512K tuples at about one match per probe against the resulting 4.79M-tuple subwindow. Prints cycles per command. Takes about a minute and 1 GB |
| `tb_merger`, `tb_merge_splitter`, `tb_indexer`, `tb_index_ram`, `tb_insertion_engine` | insertion units, against reference merges |
| `tb_boundary_generator`, `tb_partitioner`, `tb_prober`, `tb_probing_engine` | probing units, against binary-search references |
| `tb_mem_arbiter` | arbitration, answer steering and write routing under random traffic |

Every result is compared with a reference computed in the testbench.
`tb_bisort_workload` checks about 6.4M values:

* every main-array word;
* every index entry;
* every record.

The testbenches hold reset for 32 cycles. That is longer than the memory
latency, so reads issued before reset by uninitialised logic are answered
before the design starts. A real system should likewise reset the memory
interface together with the worker.

## How far to trust it

* Every block was tested against an independent reference. Each block's
  testbench was also run against a copy of the block with a deliberate bug
  (a changed comparison, an address off by one, a wrong steering choice),
  and it caught every one.
* The design compiles cleanly for simulation. It synthesises to generic
  gates, with no latches or combinational loops.
* **Throughput is only known against an ideal memory.** Take the cycle
  counts printed by `tb_bisort_workload` as a bound set by the logic. Real
  DDR3 adds refresh, row misses, read/write turnaround and its own
  bandwidth limit, and none of these is modelled.
* At the default size, insertions were simulated up to the 4M batches of
  the original evaluation, but probes only up to 512K, for run-time. A 4M
  probe takes the same path.
* Against the ideal memory, large insertions approach two tuples per cycle,
  one per channel: a 4M batch into 0.6M tuples takes 4.26M cycles. Probes
  are slower per tuple: a 512K probe of a 4.79M subwindow takes 9.2M
  cycles. That time is spent in the bound and partition phases, and in the
  probers' scans and seeks, which share the two channels. The breakdown
  between them was not measured.
* Not timing-closed on any FPGA.
