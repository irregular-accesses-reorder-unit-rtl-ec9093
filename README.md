# Irregular Accesses Reorder Unit — RTL

Graph kernels on a GPU walk an array of indices, such as an edge frontier. Each thread of a warp loads `nodes[idx[i]]`. Consecutive threads hold unrelated indices, so one warp load touches many different 128-byte memory blocks, and memory coalescing collapses.

The Irregular Accesses Reorder Unit (IRU) sits next to the L2 cache. When it is told that the order of the work items does not matter, it hands the warps a *reordered* index stream. Each warp receives 32 indices that, as far as possible, point into the same 128-byte block of the target array. Each index comes with its original position, and optionally with a secondary value (for example an edge weight). The SM then issues far fewer memory transactions per warp load.

The unit can also *filter* the stream. Two elements with the same index that meet inside the unit become one element. The survivor is either the first one, the minimum of the two secondary values, or their floating-point sum. Threads left without work because of filtering are gathered into whole warps with all lanes invalid, so those warps can finish at once.

This repository holds synthesizable SystemVerilog for the unit. It has one module per hardware block, a top that joins four partitions, and a self-checking testbench per module.

## How an index finds its warp

The key structure is a direct-mapped *reordering hash* of 1024 sets. The set of an element is a function of the memory block its index points to:

```
address = target_base + (index << target_wlog2)     // byte address of nodes[index]
block   = address >> 7                              // 128-byte block number
set     = XOR-fold of block into 10 bits             // 1024 sets
part    = set[1:0]      local set = set[9:2]         // 4 partitions x 256 sets
```

Elements whose indices fall in the same block therefore land in the same set. A set (an *entry*) holds up to 32 elements, exactly one warp. There is no tag: two blocks that fold to the same set simply share the entry. This makes the grouping slightly less exact, but it never loses an element.

An element is 80 bits: a 24-bit index, a 32-bit secondary value and a 24-bit original position. Thus 256 sets × 32 elements × 80 bits = 80 KB per partition.

The hash is split over the four memory partitions of the GPU, and each partition holds one quarter of the sets. The array of indices is split the same way, with one IRU partition per memory partition. Partition `p` prefetches the 128-byte lines `l` of the index array with `l mod 4 == p`. It then sends each element to the partition that owns the element's set.

That traffic moves on a unidirectional ring: partition `i` sends to partition `i+1 mod 4`.

## One partition

```
             L2 line reads                                  SM requests / replies
                  ^  |                                               ^  |
                  |  v                                               |  v
 config --> Controller --> Prefetcher --> Classifier --+--> local queue --+
                  |        (8 lines in flight)   |     |                  |
                  |                      hash fn-+     +--> ring queue    v
                  |                                           |     Data Processing --> Reordering hash --> Data Replier
                  |                      ring in --> Ring node <-------+        ^  (256 x 32, 2 banks)     (request FIFO,
                  |                                  ring out --> next partition                            timeout, flush)
                  +-- phase (IDLE/RUN/FLUSH) to all blocks
```

**Controller** (`iru_controller`): holds the kernel configuration written by the host, and sequences the phases IDLE, RUN and FLUSH.

**Prefetcher** (`iru_prefetcher`): the prefetch buffer has 8 slots. Each slot holds one line of 32 indices and, if the secondary array is enabled, the matching line of 32 secondary values: 8 × 224 B = 1.75 KB. The prefetcher reads the index line, then the secondary line. Tags let the replies come back in any order. Slots are handed to the classifier in order. The last line may be short.

**Classifier** (`iru_classifier`): takes one element per cycle from the head slot. It computes the element's partition and local set with the hash function (`iru_hash_fn`). It then pushes the element to the *local queue* or to the *ring queue*: 64 entries each, 1.25 KB together. The element's original position is `line × 32 + lane`.

**Data Processing** (`iru_data_processing`): feeds the single hash insert port and the ring output. Its rules:
- An element arriving on the ring for this partition is inserted before anything from the local queue, as the original design prescribes.
- An element just passing through goes back onto the ring before a new element is injected from the ring queue.
- An injection needs *two* free slots in the ring output buffer, while a forward needs one.

The last rule keeps the ring from filling completely with injected traffic. A full ring could deadlock, with every partition waiting for a slot that only its neighbour can free.

**Ring node** (`iru_ring_node`): one 128-entry input FIFO and one 128-entry output FIFO with valid/ready links. Each ring entry is 88 bits, so the two FIFOs hold 2.75 KB.

**Reordering hash** (`iru_reordering_hash`): described below.

**Data Replier** (`iru_data_replier`): described below.

## The reordering hash

Each entry is a stack of up to 32 elements with a count. An insertion goes through these steps:

1. Compare the index against every valid element of the entry. If filtering is on and the index is found, the **merge unit** (`iru_merge_unit`) combines the two secondary values:
   - `DROP` keeps the stored element;
   - `MIN` keeps the smaller unsigned value;
   - `FADD` writes the IEEE-754 single-precision sum, rounded to nearest even, with subnormals flushed to zero.

   The element is then absorbed (`ev_merge`).
2. Otherwise, if the entry holds fewer than 32 elements, append the element.
3. Otherwise, refuse the insertion (`ins_ready = 0`, `ev_full_stall`). The element waits in its queue until the replier drains the entry.

The sets are split in two banks on the lowest set bit. In a given cycle the replier may remove the top element of one entry. An insertion into the same bank in that cycle waits one cycle.

The hash also reports the fullest entry combinationally: `best_set`/`best_cnt`, with the lowest set number winning a tie. It also has an `empty` flag, driven by an occupancy counter.

The storage is written as a register array so that the design stays a single portable source. An implementation would map each bank to an SRAM with a row-wide read for the duplicate search.

## Replying to warps: the Data Replier

A warp executes `load_iru` and sends `{SM, warp}` to the IRU partition of its memory partition. The request waits in a 512-entry FIFO together with its arrival time (512 × 32 bits = 2 KB). The oldest request is served by one of three policies, checked in this order:

| condition | what is sent | event |
|---|---|---|
| some entry holds 32 elements (`best_cnt == 32`) | that entry: 32 elements of one block group | `ev_rep_full` |
| the request has waited `TIMEOUT` cycles (512 by default) | the fullest entry, then the next fullest, until 32 elements are gathered; if the hash runs dry, wait for more | `ev_rep_timeout` |
| phase is FLUSH (every partition has inserted all its data) | as above, but send whatever has been gathered when the hash is empty | `ev_rep_flush` |
| FLUSH and the hash is already empty | a reply with all 32 lanes invalid | `ev_rep_empty` |

Once a set is chosen, it stays *locked* while its elements move out of the hash, one per cycle, top first. A full-entry reply therefore takes 32 cycles to gather.

The reply has one or two beats of 32 lanes. Each lane is `{valid, data[47:0]}`:

- beat 0: `data = {index[23:0], position[23:0]}`;
- beat 1, only when the secondary array is enabled: `data[31:0] = secondary value`.

`rsp.last` marks the final beat. This bound of two replies per request follows the original design. The reply port is valid/ready, and the replier holds a beat until the SM takes it.

Each request gets a full warp if one exists, and otherwise the best merge of partial entries. The cost of waiting is bounded by the timeout. In FLUSH the leftovers drain. After that, every further request receives an all-invalid warp, and the kernel ends.

## Kernel protocol and register map

The host writes the configuration through a small register port. The port is `cfg_we`, `cfg_addr[2:0]` and `cfg_wdata[31:0]`, broadcast to all partitions.

| addr | register | meaning |
|---|---|---|
| 0 | `TGT_BASE` | byte address of the target array (the `nodes` array the indices point into) |
| 1 | `TGT_WLOG` | log2 of the target element size in bytes (0..7) |
| 2 | `IDX_BASE` | byte address of the index array, 128 B aligned, indices stored as 32-bit words |
| 3 | `SEC_BASE` | byte address of the secondary array, 128 B aligned, 32-bit values |
| 4 | `NUM` | number of elements (24 bits) |
| 5 | `FLAGS` | bit 0: secondary array enabled; bits 2:1: filter (0 none, 1 drop duplicates, 2 integer minimum, 3 float add) |
| 6 | `START` | any write clears the hashes and starts the kernel |

A kernel runs as follows:

1. After `START` the phase is RUN. The prefetchers, classifiers and ring move every element into the hash of its owning partition, and the repliers answer requests as entries fill or time out.
2. When every partition is idle, the top raises `all_inserted` and the phase becomes FLUSH. A partition is idle when all its lines are fetched, its queues are drained and its ring buffers are empty.
3. A new `START` ends the kernel.

The SM side is the GPU's business. A warp keeps issuing `load_iru` until it receives a reply with no valid lane.

Timing summary:
- The hash function is combinational.
- Classification and insertion each handle one element per cycle per partition.
- A ring hop takes 2 cycles: one FIFO write and one FIFO read.
- A full-entry reply is sent 32 cycles after the entry was chosen, plus one cycle per beat.

## Top level

`iru_top` instantiates four `iru_partition`s and closes the ring. It ANDs the idle flags into `all_inserted`.

Per partition it exposes three ports as arrays indexed by partition:
- an L2 line-read port: `mem_req_*` with address and tag, and `mem_rsp_*` with tag and 1024-bit line;
- the SM request/reply port;
- the event strobes.

The L2 cache, memory controller, interconnect, SMs and host are not part of this design. The testbench models them behaviourally.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NUM_PARTS` | 4 | original design (4 memory partitions of the evaluated GPU) |
| `SETS` per partition | 256 | original design (1024 sets / 4) |
| entry size `WARP` | 32 | original design |
| `BANKS` | 2 | original design |
| `PF_SLOTS` | 8 | original design (8 prefetches in flight) |
| `CQ_DEPTH` | 64 | chosen to match the stated 1.2 KB classifier buffer |
| `RING_DEPTH` | 128 | chosen to match the stated 2.8 KB ring buffering |
| `REQ_DEPTH` | 512 | chosen to match the stated 2 KB request buffer |
| `TIMEOUT` | 512 cycles | chosen; no value is given in the source |
| index / position / secondary width | 24 / 24 / 32 bits | index width from the original design, the rest chosen |

Index and position width limit one kernel to 2^24 elements over a target array of at most 2^24 entries. For the graphs of the original evaluation, every node number fits. The PageRank edge lists of the three largest graphs (20–25 M edges) would have to be split into two kernels.

## Where this RTL departs from, or fills in, the original description

- **Hash function:** an XOR-fold of the block number. The source asks only for good dispersion.
- **Best entry:** "best coalesced entry" is read as *the entry holding the most elements*.
- **Ownership and ring:** line-interleaved ownership of the index array, and the partition chosen by the low set bits.
- **Ring direction:** the ring is unidirectional. The source shows neighbour links on both sides but gives no routing.
- **Data Processing priorities:** the priority of forwarded traffic over injections, and the two-slot injection rule, are this design's own deadlock-avoidance choices.
- **Request balancing between partitions is not implemented.** The source mentions only "simple control logic" for it. A request is always answered by the partition it was sent to, even when another partition holds more data.
- **SM pipeline:** the SM changes (decode of `load_iru`, LD/ST routing) are outside this RTL.
- **Storage:** the hash storage is flip-flops, not SRAM macros. Yosys infers the arrays as memories.

## Verification

Every module has a self-checking testbench in `tb/` that ends by printing `TB_RESULT checks=<n> failures=<n>`:

- `iru_hash_fn_tb`, `iru_merge_unit_tb`: random comparisons against a reference model. The float adder is checked against the simulator's `real` arithmetic and against special cases.
- `iru_reordering_hash_tb`: a queue model of every entry, checking ready, merge, stall, pop, fullest-entry and empty behaviour.
- `iru_prefetcher_tb`, `iru_classifier_tb`, `iru_ring_node_tb`, `iru_data_processing_tb`, `iru_controller_tb`: unit checks with out-of-order memory replies and back-pressure.
- `iru_data_replier_tb`: the replier on a small real hash, checking all four reply kinds and the reply contents.
- `iru_partition_tb`: one partition with its ring looped back, running an unfiltered and a filtered kernel.
- `iru_top_tb`: the full-size default top with a behavioural memory of random latency and SMs that apply back-pressure. It runs three 3000-element kernels (no filter, float add, integer minimum).
  - It checks that every element arrives exactly once with its secondary value, and that the filtered sums and minima are preserved.
  - It checks that the reordered stream touches fewer 128-byte blocks per warp than the original order (about 12 instead of 23 in a typical run).
  - It counts every mechanism and fails if any never happened: ring forwarding, ring insertion, merge, full-entry stall, full, timeout, flush and empty replies, memory and reply back-pressure.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/iru_pkg.sv tb/iru_top_tb.sv \
          --top-module iru_top_tb -Mdir obj_top
obj_top/Viru_top_tb
```
