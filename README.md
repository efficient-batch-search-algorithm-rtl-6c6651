# Level-wise batch search of a static B+ tree

This is synthesizable SystemVerilog for an accelerator that looks up a whole batch of keys in a
B+ tree at once. The tree sits in the accelerator's external DRAM. The usual way to search a tree
is one key at a time, from the root to a leaf. That loads the upper nodes again for every key, and
every load is a slow DRAM access. This design goes the other way round. It walks the tree **one
level at a time for the whole batch**: each node that any key needs is read from DRAM once per
batch, and every key that passes through that node is compared with it while it is on chip.

The keys are 32 bytes wide and the data values 8 bytes. A batch holds up to 1000 keys per kernel.
The tree has order m = 16 by default, so a node holds at most KMAX = 15 keys. There are four
independent kernels, each with its own DRAM bank. All of these are parameters.

## The idea: a FIFO of (node, count) pairs

The host sorts the batch before it starts the search. Sorting makes the keys that go to the same
child of a node *adjacent* in the batch. Because of that, the work on a level can be described
with a list of pairs: "node at address A, next # keys of the batch". The keys themselves never
need to be listed.

The kernel keeps this list in one FIFO, the *result FIFO*. Each FIFO entry holds a 64-bit node
address and a 32-bit count. The kernel also keeps a key index into the batch, which advances by
one for every key it compares and goes back to 0 at the start of each level.

```
    FIFO:  (root, N)                                   level 0
 pop  -> load root, compare keys 0..N-1 one by one
          keys 0..3 -> child c0, keys 4..4 -> c2, ...  (runs of equal children)
 push -> (c0,4) (c2,1) (c5,N-5)                        level 1
 pop  -> load c0, compare keys 0..3 -> (g1,2) (g3,2)
 pop  -> load c2, compare key 4     -> (g9,1)
 ...
 leaf level: each key pushes its 8-byte result (data, or all ones = not found)
```

Level by level:

* **Inner node.** While the kernel runs through the # keys of an entry, it tracks the current
  *run*: the child address of the last key and how many keys in a row went there. When a key's
  child differs, the finished run is pushed as a new entry (child, count). The last run is pushed
  when the node ends. Keys do not pass each other, so the entries come out in batch order. The
  next level therefore reads the keys in the same order, starting again at index 0.
* **Level boundary.** The kernel knows how many entries the current level holds. It counts them
  down as it pops them and counts up the entries it pushes. When the count reaches zero, the
  pushed entries become the next level and the key index resets.
* **Leaf node** (depth field 0). Every key pushes one 8-byte result into the same FIFO: the data
  word when the key is found, or -1 (all ones) when it is not.
* **Write-back.** After the leaf level, the FIFO holds exactly the batch's results, in batch
  order. The result writer drains them into memory with one burst.

A level never holds more entries than the batch has keys. A FIFO of MAX_BATCH entries therefore
always suffices. The kernel asserts this.

The number of nodes loaded per batch is at most the number of distinct nodes on the batch's root
to leaf paths. For a 1000-key batch on a 1-million-entry tree that is about 2,250 nodes, against
6,000 for key-at-a-time search: on each kernel's slice of 250 keys, the simulation counts 554 to
570 node loads.

## Node layout in memory

The host flattens the tree into an array of equal-size nodes in breadth-first order. Each node
stores its children's *absolute byte addresses*, so the kernel never has to compute an address.
A node is 40·m bytes, which is 20 beats of 32 bytes for m = 16:

| beat                  | contents                                                                    |
|-----------------------|-----------------------------------------------------------------------------|
| 0                     | bytes 0–3 `slotUse` (keys in use), bytes 4–7 `depth`, rest padding          |
| 1 … KMAX              | `key[0]` … `key[KMAX-1]`, one 32-byte key per beat                          |
| KMAX+1 … NB-1         | inner: `childAddress[0..KMAX]`; leaf: `data[0..KMAX-1]`, 8 bytes each, four per beat, lowest bytes first |

NB = 1 + KMAX + ⌈(KMAX+1)/4⌉ is `bpt_pkg::node_beats(KMAX)`. The leaf's last 8-byte word is
unused, so leaves and inner nodes have the same size. This layout was chosen for the design:

* `depth` counts up from the leaves, so **0 marks a leaf**.
* Keys compare as unsigned 256-bit numbers, little-endian: byte 31 is the most significant.
* Inner node key i must be the largest key reachable through child i. A search key goes to the
  first child whose key is ≥ the search key, or to child `slotUse` if it is larger than all of
  them.

Slots at or beyond `slotUse` may hold anything, because the comparator masks them.

## Comparing one key with one node

`compare_logic` answers, in one combinational step, where a search key goes in the loaded node:

1. **Byte comparators** (`byte_compare`). There are 32 per node key. Each gives a one-hot
   {lt, eq, gt} for its byte pair.
2. **CBPC**, the cascading bitwise priority comparison (`cbpc`). It reduces the 32 byte results
   to two flags, *less-or-equal* and *equal*. It scans from the most significant byte down: the
   first byte that is not equal decides. A byte-compare unit and a CBPC together make one
   `key_compare`, and there are KMAX of them, one per slot.
3. **Priority encoder** (`priority_encoder`). It masks the slots at or beyond `slotUse` and picks
   the lowest slot whose *less-or-equal* flag is set. If there is none, it picks `slotUse`.

The chosen slot selects the child address. In a leaf, it selects the data word if the *equal*
flag of that slot is set, and otherwise −1. Only the first ≥ key can be equal to the search key,
so one slot index serves both uses.

Each clock, one key goes through this logic. The node's keys stay fixed while the kernel works
through its count of keys. The key buffer read takes one clock, so the kernel runs a two-stage
pipeline (issue the read, then compare and push).

## The search kernel (`search_kernel`)

A state machine runs the three phases. The numbers are clock cycles.

| phase      | what happens                                                          | approximate cost                         |
|------------|-----------------------------------------------------------------------|------------------------------------------|
| preload    | one burst read of the batch into the key buffer (`search_key_buffer`, 1000 × 32 B block RAM) | read latency + num_keys beats |
| traversal  | per FIFO entry: pop, burst-read the node (`node_loader`), compare # keys | read latency + NB beats + # + 3      |
| write-back | `result_writer` packs four results per 32-byte beat and writes one burst | ⌈(lane + num)/4⌉ beats + write response |

Nodes are loaded one after another. The next node is not prefetched while the current one is
compared, so the node load dominates: 20 beats against about 1–4 keys per node on the lower
levels. `stat_nodes`, `stat_levels` and `stat_cycles` count node loads, levels and cycles of the
last batch.

The result area need only be 8-byte aligned. The writer starts the burst at the enclosing
32-byte beat and begins filling at the right lane. Its byte strobes cover only the result words,
so the neighbouring bytes (such as the results of another kernel's slice) stay untouched.

## Several kernels (`bptree_accel`)

The top level holds P = 4 kernels. Each has a complete copy of the tree in its own DRAM bank, at
the same address in every bank. The `batch_distributor` cuts the sorted batch into P contiguous
slices of ⌊n/P⌋ keys each, and the first n mod P slices get one extra key. Kernel i reads its keys
from `key_addr + 32·off_i` and writes its results to `result_addr + 8·off_i`, where off_i is the
index of its first key. So the results land, in batch order, at the same offsets in each bank.

All kernels start on `start`. `done` pulses once when the last of them has finished, and `busy`
covers the time in between. A kernel with an empty slice finishes at once. With P = 4 the top
level takes up to 4000 keys per batch, because each kernel takes 1000. The paper's evaluation
split 1000 keys 4 × 250.

## Memory port

Every kernel has one read and one write channel to its bank, with a valid/ready handshake on each
part (all in `bpt_pkg`):

* **read:** a request `{addr, len}` (byte address, length in 32-byte beats), then `len` data
  beats, `rd_valid`/`rd_ready`/`rd_data`.
* **write:** a request `{addr, len}`, then `len` beats with `wr_data`, byte strobes `wr_strb`
  and `wr_last`. Then the bank answers with a one-cycle `wr_done` when the data is stored.

This is the interface a DRAM controller or a bus bridge would attach to. The controller itself is
not part of this RTL. The testbenches use `tb/ddr_model.sv`, a sparse memory with a fixed latency
and random back-pressure. The same file holds the host side of the tree: `build_tree` lays out a
B+ tree of n entries in the format above.

## Files

| file | block |
|---|---|
| `rtl/bpt_pkg.sv` | widths, FIFO-entry and request types, `node_beats()` |
| `rtl/byte_compare.sv`, `rtl/cbpc.sv`, `rtl/key_compare.sv` | one 32-byte comparison |
| `rtl/priority_encoder.sv`, `rtl/compare_logic.sv` | the full node comparison |
| `rtl/search_key_buffer.sv` | batch buffer (block RAM, registered read) |
| `rtl/result_fifo.sv` | the (address, count) / result FIFO |
| `rtl/node_loader.sv` | burst read and decode of one node |
| `rtl/result_writer.sv` | burst write of the results |
| `rtl/search_kernel.sv` | one kernel |
| `rtl/batch_distributor.sv`, `rtl/bptree_accel.sv` | P kernels, the top level |

Each block has a self-checking testbench, `tb/tb_<block>.sv`. The testbench works out the
expected values on its own, mostly by walking the tree in software. It prints
`TB_RESULT checks=… failures=…`.

* `tb_bptree_accel`: runs the top at reduced sizes. It counts the events that must happen: levels
  > 2, node reuse by several keys, hits, misses, even and uneven splits, idle kernels, partial
  result beats and memory stalls. It also checks that the host can write the next batch over
  the key area while the kernels are still searching, which the key preload makes safe.
* `tb_bptree_accel_full`: runs the top at its default parameters on a 1-million-entry tree, with
  batches of 1, 10, 100 and 1000 keys.
* `tb_workload_tree_sizes`: sweeps the tree size from 1 to 1,000,000 entries.
* `tb_search_kernel_orders`: builds a single kernel for each of m = 16, 32 and 64.

To simulate with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps --top-module tb_bptree_accel_full \
  -y rtl -y tb +libext+.sv -Irtl rtl/bpt_pkg.sv tb/bpt_tb_pkg.sv tb/tb_bptree_accel_full.sv
./obj_dir/Vtb_bptree_accel_full
```

The full-size run takes a few seconds and about 0.6 GB of memory. The tree is built once per bank.

## Measured behaviour

The table shows four kernels at the default sizes, with 12 entries per leaf, the read latency of
8 cycles, and random stalls:

| tree entries | height | cycles, batch of 1000 |
|---:|---:|---:|
| 1 | 1 | 917 |
| 1,000 | 3 | 2,292 |
| 100,000 | 5 | 14,862 |
| 1,000,000 | 6 | ≈ 22,000 |

At 300 MHz, 22,000 cycles are about 73 µs for 1000 keys. These cycle counts come from the memory
model, not from a real DRAM.

One kernel alone (the single-instance design) on the same million-entry tree:

| order m | height | batch 1 | batch 10 | batch 100 | batch 1000 |
|---:|---:|---:|---:|---:|---:|
| 16 | 6 | 233 | 1,523 | 11,439 | 86,733 |
| 32 | 5 | 318 | 1,911 | 14,263 | 105,423 |
| 64 | 4 | 446 | 2,531 | 19,933 | 133,592 |

The smaller order wins at every batch size, even though its tree is taller. A node costs beats,
and a node of m = 64 is four times as many beats as one of m = 16, while saving only two levels.
Four kernels run 1000 keys 3.9 times faster than one. The published measurements show the same
ranking of orders, and a 3.4× gain from four kernels in compute time. There the m = 64 design
also ran at a lower clock.

## Where this RTL departs from the published design, and what it leaves out

The published accelerator was written in high-level synthesis. This RTL follows its structure:

* the preloaded key buffer of 1000 entries;
* one FIFO for the (address, count) entries and the results, with 8 + 4 bytes per entry;
* sequential keys, with a per-node parallel comparison built from byte comparators, a CBPC and a
  priority encoder;
* burst reads and writes;
* P kernels with one bank each.

Where the published description is silent, this RTL makes its own choices:

* **Leaf test.** A node is a leaf when its depth field is 0.
* **Byte order.** Keys are little-endian numbers. Routing sends a key equal to a node key to the
  left child, which is the lower-bound rule.
* **Empty slots.** Slots at or beyond `slotUse` are masked.
* **Memory interface.** The published design reached its DRAM banks through the vendor's AXI
  interfaces, generated by HLS. This RTL has a simple burst port instead. A DRAM controller, or an AXI bridge, must be
  added to connect it to real memory.
* **Measurement.** The published design recorded timestamps with trace logic. Here three
  counters per kernel (`stat_nodes`, `stat_levels`, `stat_cycles`) stand in for it.
* **Host side.** Host software, PCIe, the kernel launch and the tree flattening are not RTL. The
  flattening exists only as the testbench task `build_tree`.
* **Batch split.** The split across kernels, the per-bank tree copies and the result offsets are
  this design's reading of "the batch is evenly distributed".
* **Capacity.** The largest tree in the published evaluation, about 10^8 nodes (64 GB), would
  need all four banks. Here each kernel reads only its own 16 GB bank.
* **Simulated sizes.** Tree sizes up to 10^6 entries are simulated. 10^7 entries would need about
  460 MB of tree per bank in the memory model.
