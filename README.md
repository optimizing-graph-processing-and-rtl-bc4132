# COBRA binning hardware: Propagation Blocking inside the cache hierarchy

Many graph kernels, and the preprocessing that builds a graph's compressed
sparse row (CSR) form from an edge list, are dominated by scattered updates of
the form `array[index] op= value` with random `index`. Propagation Blocking
(PB) turns those scattered updates into streams. It works in two phases:

* **Binning** appends every `(index, update)` tuple to a *bin*, where each bin
  covers a contiguous range of indices (the *bin range*).
* **Bin-Read** then replays the bins one at a time. The updates of one bin
  touch only a small slice of the array, and that slice fits in cache.

In software, the bin range is a compromise. Binning wants few bins, because
each bin needs a cacheline-sized coalescing buffer (a *C-Buffer*) that should
stay in L1. Bin-Read wants many small bins.

COBRA (Cache Optimized Binning for Radix partitioning), from "Optimizing Graph
Processing and Preprocessing with Hardware Assisted Propagation Blocking"
(Balaji and Lucia), removes the compromise. It keeps a separate set of
C-Buffers in every cache level, and each level has its own bin range:

* The L1 has few buffers with a large range.
* The L2 has more buffers with a smaller range.
* The LLC has many buffers with the smallest range. Each LLC buffer maps to
  one bin in DRAM.

A core adds a tuple with a single `binupdate` instruction, which only touches
the L1. Fixed-function *binning engines* in the cache controllers move the
tuples down the hierarchy. So the core bins as cheaply as if there were only a
few bins, while Bin-Read gets the LLC's many small bins.

This repository is synthesizable SystemVerilog for that Binning hardware: the
C-Buffer storage, the binning engines, the eviction buffers between levels, the
LLC-to-DRAM bin writer, the choice of bin ranges from cache sizes, and a
16-core top level. The cores, the rest of the caches, the on-chip network and
DRAM are not part of it. The design follows the architecture described in the
paper. The paper gives the architecture, not the microarchitecture, so widths,
handshakes, sizes and the end-of-Binning drain are this design's own. They are
listed under [Departures and choices](#departures-and-choices).

## How a tuple travels

```
core --binupdate--> [L1 engine | Y1=256 C-Buffers, range 2^s1]
                          | full line
                    [L1->L2 eviction buffers, 4 lines] --unpack, 1 tuple/cycle-->
                    [L2 engine | Y2=2048 C-Buffers, range 2^s2]
                          | full line
                    [L2->LLC eviction buffers, 4 lines] --unpack-->
                    [LLC engine | Y3=16384 C-Buffers, range 2^s3]
                          | full line
                    [bin writer] --line write--> DRAM bin b = LLC buffer b
```

1. **L1.** A tuple `(idx, upd)` goes to L1 C-Buffer `idx >> s1`. The engine
   reads that buffer's fill count and writes the tuple into the next free slot
   of the line.
2. **Fill and evict.** When the tuple is the eighth, the last slot of a
   64-byte line, the engine does not store it. In the same cycle, it sends the
   seven stored tuples plus the incoming one, as one line, to the eviction
   buffers, and resets the count. The C-Buffer is free again at once.
3. **Scatter.** The eviction buffers hand the line to the L2 engine one tuple
   per cycle. Each tuple may land in a different L2 C-Buffer, `idx >> s2`. This
   is the step that makes COBRA different from an ordinary cache eviction: a
   line leaves one level as a whole but enters the next scattered.
4. **LLC and DRAM.** Filled L2 buffers feed the LLC engine in the same way. A
   filled LLC buffer `b` goes to the bin writer, which writes the line at the
   tail of bin `b` in DRAM.

The bin ranges nest (`s1 >= s2 >= s3`). So every tuple that shares an L1
buffer with another can still be told apart by a finer buffer number below.
The only cost the core sees is the L1 step. `bu_ready` falls only when a
tuple would complete an L1 line and the L1-to-L2 eviction buffers are all
occupied. Backpressure propagates the same way further down, from a slow DRAM
port up through the levels.

### Choosing the bin ranges

`bin_range_cfg` turns the number of distinct indices `n` into one shift per
level. For a level with `Y` C-Buffers, the shift is the smallest `s` with
`(n-1) >> s < Y`. In words, the bin range is the smallest power of two that
spreads all indices over the buffers the level has.

With the default buffer counts and `n = 2^18`, the ranges are 1024, 128 and
16. With `n = 51 million`, they are 2^18, 2^15 and 2^12. The paper's example
ratio 16R : 8R : R is one case of this rule. The paper says the ratio depends
on the input and the cache sizes, and it is not built in.

### End of Binning: the drain

Tuples in partly filled C-Buffers would never reach DRAM on their own. After
the last `binupdate`, pulse `drain_start`. Each core's `cobra_slice` then
drains its levels in order:

1. The L1 engine walks all its buffers, one per cycle, and sends every
   non-empty buffer down as a line with its fill count.
2. Once the L1-to-L2 eviction buffers are empty, the L2 engine walks its
   buffers.
3. Then the LLC engine walks its buffers.
4. Finally the slice waits for the last DRAM write.

`done` on the top rises when every core has finished, and stays high until
the next `drain_start`. A drain takes at least Y1 + Y2 + Y3 cycles (18.7 k at
the default sizes), plus the traffic it creates. In the full-size run below it
took 24.8 k cycles. Only the last
line of each bin can be partial, so full lines in DRAM stay line-aligned.

## Bins in memory and the Bin-Read phase

There is one bin per LLC C-Buffer and per core, `bins[core][b]`. Bin `b` of
core `t` is a region of `2^stride_shift` tuples of 8 bytes each, at this byte
address:

```
bin_base + ((t * Y3 + b) << stride_shift) * 8
```

In each tuple, the index is in bits 63:32 and the update in bits 31:0. The bin
writer keeps a tail count per bin. It writes each incoming line at the tail,
with `mem_cnt` valid tuples starting at slot 0, and advances the tail. A line
that would run past its region is dropped and sets `overflow`. Size
`stride_shift` for the largest bin: about `E / (16 * bins_used)` tuples on
average, plus margin for skew.

Bin-Read is ordinary software. For Edgelist-to-CSR it runs:

```
offsets = prefix_sum(degrees)
for b in 0 .. bins_used-1:
  for t in 0 .. 15:
    for k in 0 .. count(t, b)-1:          # count via q_core/q_bin/q_count
      (src, dst) = bin[t][b][k]
      neighs[offsets[src]++] = dst
```

The neighbors of a vertex come out in some order that depends on timing. The
kernel allows any order.

## Module map

| file | what it is |
|---|---|
| `rtl/cobra_pkg.sv` | tuple, line and evicted-line types; default sizes; `range_shift()` |
| `rtl/cbuf_store.sv` | the reserved ways of one level: NBUF lines x 8 tuples, plus a fill count per line |
| `rtl/binning_engine.sv` | per-level engine: buffer select, append, evict on fill, drain walk |
| `rtl/evict_buffer.sv` | FIFO of 4 evicted lines between two levels; unpacks one tuple per cycle |
| `rtl/bin_writer.sv` | LLC-to-DRAM bin writes, per-bin tails, bin counts, overflow |
| `rtl/bin_range_cfg.sv` | per-level bin-range shifts from the index count |
| `rtl/cobra_slice.sv` | one core's L1/L2/LLC chain and its drain sequencer |
| `rtl/cobra_top.sv` | 16 slices, shared configuration, bin placement per core, `done` |

## Interfaces and timing

All handshakes are valid/ready: a transfer happens on a rising edge where both
are high.

* **Core side** (`bu_valid`, `bu_ready`, `bu_tuple`, one set per core). One
  tuple per cycle is accepted when nothing blocks. A `ready` never depends on
  the matching `valid`.
* **Binning engine.** The engine reads and updates a C-Buffer in the cycle it
  accepts a tuple, with an asynchronous read and a synchronous write. An
  evicted line leaves in that same cycle.
* **Eviction buffer.** A line is stored at the edge that accepts it. Its first
  tuple is offered to the next level in the following cycle.
* **DRAM side** (`mem_valid`, `mem_ready`, `mem_addr`, `mem_line`, `mem_cnt`,
  one set per core). The bin writer registers one line and can issue one write
  per cycle.
* **After reset.** Every C-Buffer store clears its counts, and every bin writer
  its tails, one entry per cycle, like an SRAM initialisation. At the default
  sizes this takes 16384 cycles, during which the design takes no input.
  `clear` starts the same walk in the bin writers between two Binning phases.
* **Configuration.** Pulse `cfg_load` with `num_idx` before Binning. The shifts
  are valid from the next cycle and must not change during Binning.
* **Errors.** `range_err` means an index fell beyond a level's last buffer.
  `overflow` means a bin region was too small.
* **Events.** `ev_fill`, `ev_drain` and `ev_stall` give one bit per level per
  core, and `ev_memwr` one bit per core. Each pulses for one cycle per event,
  for performance counters.

Throughput limit: each level unpacks one tuple per cycle. When the L1 evicts
lines back to back, the L2 side becomes the bottleneck and the core stalls
now and then. In the full-size run below, 16 cores issued 2^26 tuples in
4.89 M cycles, about 13.7 tuples per cycle against a peak of 16.

## Sizes

| parameter | default | where it comes from |
|---|---|---|
| cores | 16 | evaluated system |
| LLC per core | 2 MB | evaluated system |
| tuple | 32-bit index + 32-bit update | chosen; vertex IDs of 51 M-vertex graphs need 26 bits |
| line / C-Buffer | 64 B = 8 tuples | chosen; C-Buffers are cacheline sized |
| L1 C-Buffers `Y1` | 256 | chosen: 32 KB L1, 4 of 8 ways reserved |
| L2 C-Buffers `Y2` | 2048 | chosen: 256 KB L2, 4 of 8 ways reserved |
| LLC C-Buffers `Y3` | 16384 per core | chosen: half the ways of a 2 MB share |
| eviction buffers | 4 lines per level boundary | chosen ("a small number") |
| DRAM address | 48-bit byte address | chosen |

All of these are parameters (`cobra_pkg`, and the `Y1`/`Y2`/`Y3`/`NCORE`
parameters of `cobra_top`) and can be changed freely. The buffer counts do not
have to be powers of two.

## Departures and choices

These points follow the paper:

* The three-level C-Buffer hierarchy, with the bin range decreasing from L1 to
  LLC.
* Buffer selection by index divided by bin range.
* Eviction of a full C-Buffer by unpacking it into the next level.
* A small number of eviction buffers between levels.
* LLC buffers written to the bins in DRAM, one bin per LLC buffer.
* Bin ranges set from cache capacities rather than tuned by hand.
* 16 cores and 2 MB of LLC per core.

These are this design's own:

* **Power-of-two bin ranges.** Division becomes a shift.
* **The end-of-Binning drain.** The paper does not describe how partly filled
  C-Buffers are emptied.
* **Private LLC partitions.** Each core has a private partition of LLC
  C-Buffers and its own bins, following the per-thread bins of software PB.
  So there are Y3 bins per core, 16 x Y3 in all. The paper's LLC is shared
  and NUCA, and it does not say how the cores share it.
* **No shared interconnect or memory port.** There is no mesh and no shared
  memory controller; each core has its own DRAM write port.
* **Fixed bin layout.** Bins have a fixed-stride layout in memory, with tail
  counters, a count query and an overflow flag.
* **Timing.** Datapaths run at one tuple per cycle, with single-cycle C-Buffer
  updates and sequential clearing of the tables.
* **Not modelled.** The core's handling of `binupdate` (it retires at the head
  of the reorder buffer like a store), the replacement-policy side of way
  partitioning, and the tags and coherence of ordinary cache lines.

The paper's example graph prints CSR offsets `0 5 6 8 8`. These disagree with
its own edge list and neighbor array, which give `0 4 5 7 7 (7)`. The
testbench checks the latter.

## Verification

Each module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_cbuf_store` | clearing after reset, slot and count writes, read-old-during-write |
| `tb_evict_buffer` | FIFO order, slot order, full after 4 lines, empty flag, under random backpressure |
| `tb_binning_engine` | each evicted line equals, slot by slot, the tuples its buffer collected, and leaves in the cycle of its last tuple; one tuple per cycle; stall only on a full eviction buffer; drain contents and order; range error |
| `tb_bin_writer` | addresses, tails, counts, full-rate writes, overflow, clear |
| `tb_bin_range_cfg` | shifts for many index counts, including 18 M, 51 M and 2^32 |
| `tb_cobra_slice` | one core at small sizes with a slow memory: every bin holds exactly its tuples; fills, drains and stalls occur at every level |
| `tb_cobra_top` | Edgelist-to-CSR end to end on 2 cores: the example graph (CSR and CSC) and a random 1000-vertex, 6000-edge graph under memory backpressure; Bin-Read is done in the testbench and compared with a directly built CSR; counts every mechanism |
| `tb_pagerank` | three PageRank iterations on a uniform and on a skewed (power-law-like in-degree) graph, 4 cores: binupdate(dst, rank[src]/outdeg[src]) in 16.16 fixed point, Bin-Read sums, exact comparison with a direct iteration |
| `tb_cobra_full` | the default 16-core design binning 2^26 random edges over 2^25 vertices (an input the size of the evaluated uniform-random graph, at average degree 2); checks every DRAM write on the fly and all 262144 bins by count and hash, and requires binning at 80% of peak rate or better |

`tb_cobra_full` issued 2^26 edges in 4,885,378 cycles and drained in 24,752
cycles. Along the way, it saw 8.39 M L1, 8.37 M L2 and 8.27 M LLC fill
evictions, and 8.50 M DRAM line writes. It passed 84.4 M checks with no
failure. Its rate, 86% of one tuple per core per cycle, is measured with a
memory that is always ready; the 80% floor it checks is a choice of the
testbench, since no rate for the hardware alone is published.

To run a testbench with Verilator 5 (from the repository root):

```
verilator --binary --timing --assert -Irtl -Itb rtl/cobra_pkg.sv tb/tb_cobra_top.sv \
          --top-module tb_cobra_top -Mdir obj_tb -o sim
obj_tb/sim +verilator+rand+reset+2
```

Replace `tb_cobra_top` with any testbench name. The full-size one builds in
well under a minute and runs in under a minute. Testbenches print a summary of
event counts before the `TB_RESULT` line.

## What the evaluated inputs need

The paper's inputs have 18 to 51 million vertices and average degrees of 2 to
8 (DBP, KRON, URND, EURO and HBUBL). The kernels are Edgelist-to-CSR and
PageRank. These fit the default hardware:

* **Index width.** Every vertex ID fits the 32-bit index.
* **LLC bin range.** The range is at most 2^12 (51 M / 16384 buffers).
* **Bin space.** With `stride_shift` = 20, the bins of 16 cores take 2^41 bytes
  of the 48-bit address space. That leaves room for up to 2^20 tuples per bin.
  The average is a few hundred for these graphs.
* **PageRank updates.** These are 32-bit contributions and fit the update
  field.

The hardware places no limit on the number of edges.
