# Linkey: a table-driven prefetcher for linked data structures

Linked data structures such as lists, trees and graphs defeat ordinary
prefetchers. Each node is allocated on its own, so the next node's address is
not a stride away. It is a pointer stored inside the current node. A core
walking such a structure waits for one memory round trip per node.

Linkey splits the problem between software and hardware.

- **Software** describes one structure, once, before its hot loop:
  - the size of a node;
  - the byte offsets of the child pointers that matter for the traversal;
  - one or more root nodes where traversals begin.
- **Hardware** learns the actual shape of the structure from the data that
  comes back from memory. It keeps that shape in two small tables.
  - The **Address Table (AT)** holds known node addresses.
  - The **Child Association Table (CAT)** holds parent → child links.

When the core touches a node that the AT knows, the prefetcher walks the cached
shape breadth first. In one go it requests the parts of several descendants
that the traversal will need. When the cached shape runs out, a third structure
takes over. The **Backup Fetch Queue (BFQ)** holds child pointers found in the
data of earlier prefetches, and lets the prefetcher keep running ahead of the
core.

This repository holds synthesizable SystemVerilog for the prefetcher. It follows
the paper "Improved Prefetching Techniques for Linked Data Structures". The
defaults are that paper's main configuration:

- 256-entry AT and 1024-entry CAT;
- eight child pointers per node and four roots;
- an 8-entry BFQ and an 8-entry output buffer;
- 48-bit virtual addresses.

The core, its instruction decoder, and the cache and memory hierarchy are
outside the RTL. They connect through the ports of the top module `linkey`.

## The software contract

The prefetcher assumes three things about the traversal:

1. Child pointers rarely change.
2. Most traversals start from a few root nodes.
3. The first field of a node that a traversal reads is its key. Its offset from
   the node start is called **KeyO**.

Six configuration operations (the `lds.*` instructions) set it up. In this RTL
they arrive on the `cfg_*` port as `cfg_op_e` values:

| operation | effect |
|---|---|
| `CFG_RESET` (lds.reset) | Clears every register and invalidates the AT, CAT, BFQ and output buffer. |
| `CFG_SET_SIZE` (lds.set_size) | Sets **NodeSize**, 12 bits. A node is at most 4 KiB. |
| `CFG_ADD_OFFSET` (lds.add_offset) | Appends one 12-bit child-pointer offset to **ChildOs**. At most eight are kept; a ninth is ignored. |
| `CFG_SET_ROOT` (lds.set_root) | Inserts address `cfg_data` into the AT, or finds it there. It then points root `cfg_idx` at that entry. |
| `CFG_CLEAR_ROOTS` (lds.clear_roots) | Clears the four root valid bits. |
| `CFG_NEW_TRAV` (lds.new_traversal) | Optional marker: the next root hit starts a new traversal. |

`CFG_SET_ROOT` holds `cfg_ready` low until the root is in the AT. This makes the
instruction serializing: configuration is finished before the core's next
access is looked at.

If the AT has no evictable entry, the root stays invalid. This can only happen
when the table is full of other roots and of entries in use.

KeyO is not written by software. The table search sets it whenever a new
traversal starts, to the offset at which the core touched the root.

## Storage

Node addresses are kept as 45-bit word addresses: the byte address divided by
8, since nodes are 8-byte aligned.

- **AT entry:**
  - valid (1), UsedLRU (1), JustBuilt (1), address (45);
  - per child pointer: a valid bit and a 10-bit CAT index;
  - 136 bits in all.
- **CAT entry:**
  - valid (1), UsedLRU (1), JustBuilt (1);
  - parent AT index (8), child AT index (8), child-pointer number (3);
  - 22 bits in all.

At the defaults the storage adds up as follows:

| structure | size |
|---|---|
| AT: 256 × 136 bits | 4352 B |
| CAT: 1024 × 22 bits | 2816 B |
| BFQ: 8 × 45 bits | 45 B |
| NodeSize, 8 × ChildOs, KeyO, 4 × (root index + valid) | 19.5 B |
| **total** | **7232.5 B** |

This matches the 7232.5 B the paper gives for this configuration. The output
buffer and the state machines' working registers come on top of it.

The tables are built from flip-flops, not SRAM. The searches below compare
against every entry at once.

## Looking up a core access: table search (`linkey_search`)

For each demand address `A` that the core presents, two checks run in the cycle
the address is accepted.

1. **Root check.** Each valid root `R` is tested with
   `R.addr ≤ A < R.addr + NodeSize`. If several roots match, the lowest root
   number wins.
2. **Content search.** The key `(A − KeyO) >> 3` is compared with the address
   of every valid AT entry that is not a root. Because a traversal reads the
   key field first, `A − KeyO` is the node start. No bound check is needed for
   ordinary nodes.

The root check has priority.

A root hit starts a **new traversal** in either of two cases:

- the previous accepted access did not hit that same root;
- the `CFG_NEW_TRAV` marker was given since the last access.

A new traversal does two things:

- it loads KeyO with `A − R.addr`;
- it clears every JustBuilt bit in both tables.

Any hit also sets UsedLRU on the AT entry that was hit. It sets UsedLRU on every
CAT entry whose parent is that entry.

## Issuing prefetches: the fetch pipeline (`linkey_issuer`, `linkey_outbuf`)

A hit starts a breadth-first walk of the cached shape. The walk uses a 16-entry
queue of AT indexes, which starts with the hit entry. Each index popped from the
queue is handled like this:

- The walk **prefetches the node**. It requests the block holding
  `start + KeyO` and the block holding `start + o` for every offset `o` in
  ChildOs. Nodes may span several blocks, and only the parts the traversal
  reads are fetched.
- It **queues the children**. It follows every valid CAT pointer of the entry
  and appends the child's AT index to the queue.
- A per-invocation visited bit stops cycles, such as a doubly linked list.

When the queue is empty, the walk pops node addresses from the BFQ. It
prefetches those nodes in the same way.

Each request carries the block address and a 13-bit signed **metadata** value.
The metadata is the offset of the node start from the start of the block. The
memory side returns it with the data, so table building knows which node the
block belongs to.

A request is dropped in three cases:

- its block is the core's own demand block;
- it was already issued in this walk;
- it is still waiting in the output buffer.

One walk issues at most 8 requests: the size of the output buffer. It ends
early if the buffer fills.

The buffer presents its oldest requests on `ISSUE_W` = 2 ports. Port *i* may be
taken only together with ports 0..*i*−1.

The walk is a state machine. In each cycle it pops an index, follows one child
pointer, or handles one request. While it runs, `core_ready` is low. A core
that cannot wait may drop its request; the prefetcher then simply does not see
that access.

## Learning the shape: table building (`linkey_builder`)

Every block that returns from memory, and every block written by a completed
store, goes to the builder on the `resp_*` port. A block carries 64 bytes of
data, plus metadata if it answers a prefetch. The builder works in four steps.

1. **Find the parents.** A base-and-bound check over the whole AT finds every
   node that may overlap the block: `block(addr) ≤ blk ≤ block(addr + NodeSize)`.
2. **Read the children.** For each such parent P and each child number i, it
   checks whether the 8-byte slot `P + ChildOs[i]` lies in the block. If so:
   - The old link i of P, if there is one, is invalidated first: the CAT entry
     and P's pointer i are cleared.
   - If the slot holds a non-NULL value C, C is looked up in the AT, or
     allocated there with JustBuilt set.
   - A CAT entry (P, C, i) is then allocated, and P's pointer i is set to it.
   - Because the old link is always removed, a changed pointer is replaced and
     a NULLed pointer is dropped.
3. **Evict where needed.** Allocation uses a pseudo-LRU with two bits per
   entry, described below. If either table has no candidate, the insertion is
   skipped.
4. **Fill the BFQ.** If the block came with metadata, the node it names is
   looked up in the AT. Each non-NULL child pointer of that node that lies in
   the block is pushed into the BFQ, unless the AT already links it: the node
   is known and its pointer i is valid. A push into a full BFQ is dropped.

The builder is independent of the search and the fetch pipeline. The three
share the AT and CAT through separate read ports, and only the builder writes.
It takes one response at a time; `resp_ready` is high only when it is idle.

### Replacement: UsedLRU and JustBuilt

Each AT and CAT entry has two replacement bits.

- **UsedLRU** is set by search hits, as described above. When every valid
  entry of a table has it set, all UsedLRU bits of that table are cleared.
- **JustBuilt** is set when table building creates the entry. It is cleared for
  all entries when a new traversal starts. It protects entries that were
  learned but not yet used.

An entry with either bit set is not evicted. The victim is the lowest-numbered
invalid entry, or else the lowest-numbered entry with both bits clear. Roots
are never victims. Neither is the parent whose children are being inserted.

### Invalidation

- **Evicting a CAT entry** clears the pointer in its parent AT entry. The parent
  and the child-pointer number stored in the CAT entry give its location.
- **Evicting an AT entry V** goes in three steps:
  1. every CAT entry with parent V is invalidated in one cycle;
  2. each CAT entry with child V is found and invalidated, one per cycle,
     clearing its parent's pointer;
  3. V is overwritten.

## Top-level interface (`linkey`)

All ports use valid/ready handshakes. A transfer happens on a rising clock edge
where both signals are high. `rst_n` is an asynchronous, active-low reset.

| port | dir | width | meaning |
|---|---|---|---|
| `cfg_valid/ready`, `cfg_op`, `cfg_idx`, `cfg_data` | in/out | 1/1, 3, 2, 48 | one configuration operation |
| `core_valid/ready`, `core_addr` | in/out | 1/1, 48 | one demand access from the core |
| `resp_valid/ready`, `resp_blk`, `resp_data` | in/out | 1/1, 42, 512 | a block returned from memory, or written by a store |
| `resp_meta_valid`, `resp_meta` | in | 1, 13 | metadata of the prefetch this block answers |
| `pf_valid[2]`, `pf_req[2]`, `pf_ready[2]` | out/in | 2, 2×55, 2 | prefetch requests (block, metadata), oldest on port 0 |
| `events` | out | 12 | one-cycle pulses for statistics (`linkey_events_t`) |
| `idle` | out | 1 | nothing in progress and no prefetch waiting |

`events` reports these pulses:

- **Search:** search hit, root hit, new traversal.
- **Fetch pipeline:** node prefetched from the tables, node prefetched from the
  BFQ.
- **BFQ:** push, push dropped.
- **Table building:** link built, link replaced, AT eviction, CAT eviction,
  insertion skipped.

### Timing

- **Search.** The search result is used in the cycle the core access is
  accepted.
- **Fetch pipeline.** A walk takes about one cycle per queued index, child
  pointer and candidate request. The end-to-end testbenches measure it:
  - Walks take 6 to 13 cycles on average, and never more than 64.
  - The first prefetch leaves 10 to 49 cycles after the hit. The blocks of the
    hit node itself are usually the demand block and are filtered out, so the
    first request sent is for a child.
- **Table building.** This takes a few cycles per parent and child pointer, plus
  the eviction steps.

The paper models the prefetcher as taking no time. Its throughput in cycles is
this implementation's own.

## Files

| file | contents |
|---|---|
| `rtl/linkey_pkg.sv` | widths, address types, request and event structs, operation enums |
| `rtl/linkey_config.sv` | NodeSize, ChildOs, KeyO and Roots registers; configuration decode |
| `rtl/linkey_at.sv` | Address Table: entries, CAM ports, base-and-bound, victim choice, replacement bits |
| `rtl/linkey_cat.sv` | Child Association Table: entries, search by child, bulk invalidation by parent, victim choice |
| `rtl/linkey_search.sv` | root check, content search, new-traversal detection |
| `rtl/linkey_issuer.sv` | fetch pipeline (breadth-first walk, BFQ draining, deduplication) |
| `rtl/linkey_outbuf.sv` | 8-entry output buffer with two issue ports and the duplicate check |
| `rtl/linkey_bfq.sv` | Backup Fetch Queue |
| `rtl/linkey_builder.sv` | table building, eviction, invalidation, BFQ filling, root insertion |
| `rtl/linkey.sv` | top level |
| `tb/tb_linkey*.sv` | one self-checking testbench per module, plus `tb_linkey_full` |
| `tb/tb_wl_*.sv` | benchmark workloads run on the default-size top |
| `tb/linkey_mem_model.svh` | memory, cache, core and configuration model with the prefetch checks, shared by all top-level testbenches |
| `tb/linkey_env.svh` | binary-search-tree workload and mechanism counts of `tb_linkey` and `tb_linkey_full` |
| `tb/linkey_wl_env.svh` | data structures and traversals of the benchmark testbenches |
| `tb/tb_util.svh` | check counters, watchdog and result line |

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog. Results at the time of writing:

| testbench | what it checks | checks |
|---|---|---|
| `tb_linkey_config` | every operation; set_root handshake; offset saturation | 19 |
| `tb_linkey_at` | random operations against a reference model of the AT (CAM, bound check, victim, LRU epochs, roots) | 216 460 |
| `tb_linkey_cat` | random operations against a reference model of the CAT | 29 341 |
| `tb_linkey_bfq` | random push/pop against a queue model, including overflow | 927 |
| `tb_linkey_search` | directed cases: root bounds, KeyO, masking, new-traversal rules | 71 |
| `tb_linkey_outbuf` | random traffic against a model; in-order two-port issue | 9 570 |
| `tb_linkey_issuer` | a reference model of the walk on random tables and BFQ contents | 1 555 |
| `tb_linkey_builder` | directed steps with the real AT/CAT/BFQ: linking, relinking, both evictions, skipped insertion, BFQ rule | 27 |
| `tb_linkey` | end to end at 32-entry AT, 16-entry CAT, 2-entry BFQ | 19 |
| `tb_linkey_full` | end to end at the default parameters | 14 |

### The end-to-end testbenches

The two end-to-end testbenches share one environment.

**The workload.** It builds a balanced binary search tree with nodes placed at
random. Each node is 32 bytes: key, left and right pointers, value. It then
probes the tree with keys, half of them drawn from a small hot set. Every few
probes, one node's children are swapped by a store, which changes the structure
under the prefetcher.

**The memory model.** It has an associative cache. Demand misses are filled
after 20 cycles; prefetches are filled after 30 cycles and carry their metadata.

**The checks.**

- Every prefetch must name a real node (block start plus metadata). Its block
  must hold that node's key field or one of its child pointers.
- Prefetched blocks must later be used by the core.
- The same probes must then be run with the prefetcher reset and unconfigured.
  That run must see more demand misses.

At the reduced sizes every mechanism of the design must occur at least once:

- search hit, root hit, new traversal;
- prefetching from the tables and from the BFQ;
- BFQ push and overflow;
- link, relink, AT eviction, CAT eviction, skipped insertion;
- two prefetches in one cycle;
- a core access held while the walk runs.

The run prints how often each one happened.

**Results.**

| run | tree | probes | demand misses, prefetcher on | off |
|---|---|---|---|---|
| `tb_linkey` | 255 nodes | 150 | 113 | 136 |
| `tb_linkey_full` | 1023 nodes | 120 | 126 | 227 |

`tb_linkey_full` uses every default parameter. Its tree is four times the AT
capacity, so AT evictions and relinks occur there too; at that size the BFQ,
CAT eviction and skipped insertion occur only in some runs, so they are
required only of `tb_linkey`. It runs in a few seconds.

### Benchmark workloads

Five more testbenches run the benchmark suite on the top at its default
parameters. Each builds the data structure in the memory model. Each runs the
traversal once with the prefetcher configured and once with it reset and
unconfigured. Nodes sit at random 8-byte offsets in a shuffled pool, so a
node can straddle two blocks.

Each node has a key word at offset 0 and its pointer slots at 8, 16, ...;
the slot offsets are given to the prefetcher as its child offsets. Every
prefetch is checked against the real nodes. Each workload must issue
prefetches that the core then uses. The miss counts are printed but not
checked, because the prefetcher is not expected to help every traversal.
Results of one run, in demand misses (cache of 768 blocks, i.e. 48 KiB):

| testbench | workload | size | prefetcher on | off |
|---|---|---|---|---|
| `tb_wl_lists` | singly linked list, two passes | 1000 nodes | 1962 | 2254 |
| | same, reversed in place between passes | 1000 nodes | 1951 | 2234 |
| | doubly linked list, both directions (two roots) | 1000 nodes | 2321 | 2963 |
| `tb_wl_bintree` | depth-first walk of a full tree | 1023 nodes | 2019 | 2580 |
| | breadth-first walk | 1023 nodes | 1829 | 2458 |
| | search probes, uniform keys | 1000 probes | 880 | 1240 |
| | search probes, Zipf-like keys | 1000 probes | 424 | 679 |
| `tb_wl_dyntree` | red-black tree, 5% inserted while probing, uniform | 1023 keys | 844 | 1233 |
| | same, Zipf-like | 1023 keys | 479 | 705 |
| | splay tree, 5% inserted while probing, uniform | 1023 keys | 1352 | 1615 |
| | same, Zipf-like | 1023 keys | 706 | 948 |
| `tb_wl_octree` | W-cycle over an 8-ary tree | 585 nodes | 1895 | 2340 |
| `tb_wl_graph` | breadth-first search, up to 5 edges per vertex | 1000 vertices | 1267 | 2940 |
| `tb_wl_trie` | word lookups, uniform (26-way nodes, 8 letters tracked) | 300 words | 3072 | 3251 |
| | same, Zipf-like | 300 words | 1687 | 1749 |

In the dynamic trees, every rotation and every splay step is a store to a
child pointer, so the prefetcher sees the change and relinks its tables.
When the root moves, the program reloads the root register. Only the
"small" size of about a thousand nodes is simulated; larger structures use
the same tables and differ only in run time. Each testbench runs in under a
minute.

### Running a testbench

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -I. --top-module tb_linkey \
    rtl/linkey_pkg.sv rtl/linkey_*.sv rtl/linkey.sv tb/tb_linkey.sv -Mdir obj -o sim
./obj/sim
```

Replace `tb_linkey` with any other testbench name. The include path `-I.` is
needed because testbenches include `tb/tb_util.svh` relative to the repository
root.

## Where this design departs from the paper, or fills a gap

**Taken from the paper:**

- the table contents and their widths;
- the storage budget;
- the search, building, eviction, invalidation and BFQ rules;
- the request addresses and deduplication;
- the sizes: 256/1024 entries, eight offsets, four roots, 8-entry BFQ and
  output buffer.

**Chosen here:**

- **Timing.** The paper evaluates the prefetcher in a simulator where it takes
  no time. Here the search takes one cycle; the walk and table building are
  sequential state machines.
  - Core accesses that arrive during a walk are held off with `core_ready`.
  - Responses wait with `resp_ready` while the builder is busy.
- **Interfaces.** The paper gives no port-level interface. The valid/ready
  handshakes, the event outputs and the `idle` output are this design's.
- **Queues.** The walk's index queue holds 16 entries; indexes beyond that are
  dropped. The BFQ drops pushes when full. The paper gives neither the queue
  size nor an overflow rule.
- **Tie-breaking.** Victims are the lowest-numbered candidates. Among several
  matching roots, the lowest root number wins.
- **New traversal.** "A different node" is read as: the previous accepted
  access did not hit the same root. That includes an access that hit nothing.
- **Replacement epochs.** UsedLRU bits are cleared when all *valid* entries
  have the bit set. A partly filled table therefore still ages.
- **Block size.** A 64-byte cache block is assumed; the paper does not state it.
- **Stores.** A completed store is presented to the builder like a response
  without metadata.
- **Root insertion.** lds.set_root inserts the root without JustBuilt. Roots
  are never evicted, so the bit would not matter.
- **BFQ filling.** The paper notes that the metadata could replace the
  base-and-bound search during table building. Here the metadata is only used
  to fill the BFQ; parents are always found with the base-and-bound search.
- **Port count.** Two prefetches per cycle on the output side is a parameter
  (`ISSUE_W`). The paper does not give a port count.

## Not included

- **The core.** This includes its decoding of the `lds.*` instructions. The
  `cfg_*` port stands in for the decoded instruction.
- **The cache hierarchy.** This includes the L1-D controller that accepts
  prefetches and returns blocks with metadata. The testbenches contain a
  behavioural model of it.
- **Physical design.** No timing closure or area numbers. The AT's two CAM
  ports and per-entry bound comparators over 256 entries are large. A real
  implementation would likely pipeline the table search.

## Lint notes

The remaining Verilator warnings are of two kinds. Each module's header
explains its own.

- **Address bits that are never used.** For example, the low three bits of
  8-byte-aligned addresses.
- **`rst_n` used by assertions.** The reset appears in `disable iff` of the
  handshake assertions, so it is reported as both a synchronous and an
  asynchronous signal. All flops reset asynchronously.
