# Hybrid-partitioned binary search tree lookup engine

Searching a binary search tree in hardware is limited by memory ports more than
by logic. Keeping every tree level in its own on-chip RAM lets one key per
RAM port per level be in flight, so a single pipeline finishes two searches per
clock with dual-port block RAMs. This design gets beyond that limit without
storing the tree twice. The top few levels are kept in flip-flops, where any
number of keys can read them in the same cycle. Below them the tree is cut into
`2^REG_LEVELS` independent subtrees, and each subtree is a two-lane pipeline
with one dual-port RAM per level. A chunk of keys (16 by default) goes through
the register levels together, and each key is then sent to the subtree it
belongs to. A small buffer in front of every subtree evens out chunks that send
too many keys to one subtree. When keys spread evenly, the engine finishes a
full chunk, 16 lookups, every cycle. When all keys go to the same subtree, it
falls back to the two lookups per cycle of a plain pipeline.

This RTL is an implementation of the hybrid horizontal/vertical partitioning
scheme of Melikoglu et al., "A Novel FPGA-Based High Throughput Accelerator
For Binary Search Trees". The paper gives the architecture, the buffer mapping
rules and the key sets. Where the paper is silent, this design chose the
widths, the tree layout, the interfaces, the reset and the timing; each choice
is noted below and at the top of each file.

## The tree and where its nodes live

A node is a 32-bit key and a 32-bit value. The tree is complete and has
`TREE_LEVELS` levels: 20 by default, which is 1,048,575 nodes. Nodes are
addressed by level `j` and index `i` within the level. The children of node
`(j, i)` are `(j+1, 2i)` (left, smaller keys) and `(j+1, 2i+1)` (right, larger
keys). There are no child pointers, so the whole tree is the set of level
arrays.

| levels | where | module | per node |
|---|---|---|---|
| `0 .. REG_LEVELS-1` (3 by default, 7 nodes) | flip-flops, heap order (node `(j,i)` at `2^j + i`) | `register_layer` | read by every key of a chunk at once |
| `REG_LEVELS .. TREE_LEVELS-1` | subtree `s = i >> (j-REG_LEVELS)`, local level `j-REG_LEVELS`, local index `i mod 2^(j-REG_LEVELS)` | `subtree_pipeline`, one `bram_partition` per local level | two accesses per cycle (ports 1 and 2) |

So a node on the last register level, index `i`, is the parent of subtrees
`2i` (left) and `2i+1` (right). With the defaults there are 8 subtrees of 17
levels each. The largest level RAM holds 65,536 nodes, and 67.1 Mbit are stored
in all.

Loading: `wr_en/wr_level/wr_index/wr_node` write one node per cycle, addressed
as above over the whole tree. `bst_accel` decodes each write to a register node
or to a subtree's level RAM. The testbenches fill the tree before searching.
Writing while searching is not supported: a write takes port 1 of its level
RAM for that cycle. Building and updating the tree (insert and delete) are not
part of this design.

## How a key travels

```
chunk (CHUNK keys) --> register_layer: REG_LEVELS stages, all keys compared in parallel
                        |  hits --------------------------------------------> reg_res[k]
                        v
                       subtree_labeler: subtree number + label per key, count per subtree
                        |
                        v  (whole chunk or nothing; else stall)
                       NUM_SUB buffers (queue_buffer or direct_buffer), 2 keys out per cycle
                        |            |
                        v            v
                       subtree_pipeline x NUM_SUB: ports 1 and 2, one level per cycle --> sub_res[s][0/1]
```

* **Register layer.** Each stage compares every key of the chunk with the node
  on its path at one level. Equal means found. Larger continues right and
  smaller continues left. After the last register level a key that was not
  found carries its subtree number: `2i+1` if it was larger than node `i`,
  otherwise `2i`.
* **Label stage.** This stage tells the queue buffers where each key goes. A
  key's label is the number of earlier keys in the same chunk that go to the
  same subtree. The stage also counts the keys per subtree. It is one
  registered stage of parallel compares and counts.
* **Buffers.** There is one buffer per subtree. They are described in the next
  section. The chunk at the label stage moves into the buffers only if every
  buffer has room for all the keys it sends there. Otherwise `stall` is high:
  the register layer and the label stage hold, `in_ready` is low, and the
  subtrees keep draining the buffers.
* **Subtrees.** Each subtree pipeline takes up to two keys per cycle, one per
  RAM port. At each level, the node read in the previous cycle is compared with
  the key, and the child's address goes to the next level's RAM in the same
  cycle. A key found above the leaves keeps moving down with its result and
  skips the reads that remain, so every lane gives its results in the order
  keys entered. A key that matches no node on its path comes out with
  `found=0`.

Latency, counting the clock edge that accepts the chunk as edge 0 and assuming
no waiting: a register-layer hit is on `reg_res` after edge `REG_LEVELS+1`,
which is edge 4 by default. Every other key is on `sub_res` after edge
`REG_LEVELS+SUB_LEVELS+2`, which is edge 22, plus any cycles it waits in its
buffer. Results carry the tag given with the key, because register-layer hits
overtake deeper keys and different subtrees run independently.

## The buffers: where keys wait, and when the front stalls

Each subtree can start two searches per cycle. A chunk can send it anything
from 0 to `CHUNK` keys. The buffer in front of a subtree stores a chunk's keys
in one cycle and releases them two per cycle. Both kinds of buffer have
`SLOTS` entries, which equals `CHUNK` (16) by default, the size the paper used.
Both count an entry that is read out in the same cycle as free for an incoming
key.

**Direct mapping (`direct_buffer`, `MAPPING = MAP_DIRECT`).** Key `k` of a
chunk always goes to slot `k` of its subtree's buffer, so no labels are needed.
Slots `0 .. SLOTS/2-1` feed port 1 and the upper half feeds port 2. Each port
takes the lowest-numbered occupied slot of its half. The chunk stalls if any of
its keys finds its slot taken, even when other slots are free. For example,
take a buffer holding keys in slots 3 and 4. A chunk whose key 3 goes to this
subtree must wait one cycle, until slot 3 has been read. A chunk whose keys 0,
1, 2 and 3 all go here would not have waited at all if slot 3 had been empty.
The logic is small, but the stall rate is high whenever keys bunch up.

**Queue mapping (`queue_buffer`, `MAPPING = MAP_QUEUE`, default).** The buffer
is a circular queue with its own read and write pointers and an occupancy
count. A key with label `n` is written at `write pointer + n`, so a chunk's
keys take consecutive entries in chunk order. The write pointer then moves by
the subtree's key count. The two oldest entries leave each cycle: the first to
port 1 and the second to port 2. A chunk stalls only when some subtree gets
more keys than its buffer has free entries. Keys reach each subtree in arrival
order.

In both cases a chunk is accepted whole or not at all. Each buffer's `conflict`
output depends only on its own state and the chunk at the label stage. `stall`
is the OR of all `conflict` outputs, and the push strobe is its inverse, so
there is no combinational loop. Assertions check that no chunk is ever pushed
into a buffer that reported a conflict, and that a queue never holds more than
`SLOTS` keys.

## Throughput

These figures are measured in simulation on the full 2^20-1 node tree. Each
set is streamed at the fastest rate the engine accepts. The ratio is to 2
keys/cycle, the rate of one dual-port pipeline over the whole tree.

| configuration | Equal (one leaf key repeated) | Random (random tree keys) | Split (key `k` of a chunk in subtree `k mod NUM_SUB`) |
|---|---|---|---|
| 8 subtrees, queue (default), 64K / 256K keys | 1.00x / 1.00x | 7.17x / 7.25x | 7.96x / 7.99x |
| 8 subtrees, direct, 64K / 256K | 1.00x / 1.00x | 4.00x / 4.03x | 7.96x / 7.99x |
| 4 subtrees, queue (`REG_LEVELS=2, SLOTS=8`), 64K / 256K | 1.00x / 1.00x | 3.45x / 3.45x | 3.99x / 4.00x |
| 4 subtrees, direct, 64K / 256K | 1.00x / 1.00x | 2.21x / 2.21x | 3.99x / 4.00x |

The Equal and Split columns, and the queue-mapped Random results, agree with
the paper's measurements, which put Random at about 7x for eight subtrees and
about 3.3x for four. Direct mapping does worse here than the paper reports for
Random keys: about 4x against roughly 5x for eight subtrees, and 2.2x against
roughly 2.4x for four. The paper gives a queue advantage of 32 to 39 percent on
Random keys; this RTL shows 56 to 79 percent. The paper does not describe its
direct-mapped buffer in enough detail to find the cause. Two candidates are
which slot a port reads and when a freed slot can be refilled.

## Parameters (`bst_accel`)

| parameter | default | meaning |
|---|---|---|
| `TREE_LEVELS` | 20 | levels of the complete tree (2^20-1 nodes) |
| `REG_LEVELS` | 3 | levels held in registers; `NUM_SUB = 2^REG_LEVELS` subtrees |
| `CHUNK` | `2*NUM_SUB` = 16 | keys per chunk: two ports per subtree |
| `SLOTS` | 16 | entries per buffer; must equal `CHUNK` for direct mapping, a power of two for queue mapping |
| `MAPPING` | `MAP_QUEUE` | `MAP_QUEUE` or `MAP_DIRECT` |
| `NUM_SUB`, `SUB_LEVELS`, `LW`, `IW` | derived | do not override |

Key, value and tag widths (32, 32 and 24 bits) are in `bst_pkg`. The tag only
needs to tell apart the keys in flight. Here it carries the key's index in its
key set.

The default tree stores 67.1 Mbit. That is more than the roughly 54 Mbit of
block RAM on the Virtex-7 board the paper used, where 19 levels is the largest
complete tree that fits. The RTL itself puts no limit on the size.

## Ports (`bst_accel`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; synchronous active-low reset of pipelines and buffers (tree contents are kept) |
| `in_valid[CHUNK]`, `in_query[CHUNK]` | in | a chunk: per lane a valid bit and `{key, tag}`; partial chunks allowed |
| `in_ready` | out | the chunk is taken at this clock edge (low while stalled) |
| `wr_en`, `wr_level`, `wr_index`, `wr_node` | in | tree load, one node per cycle |
| `reg_res[CHUNK]` | out | hits in the register levels: `{valid, found=1, query, value}` |
| `sub_res[NUM_SUB][2]` | out | subtree results per port: `{valid, found, query, value}` |
| `stall` | out | the front end is stalled this cycle |

The key source and the result sink are outside this design. Results cannot be
back-pressured, so the sink must take up to `CHUNK + 2*NUM_SUB` results per
cycle.

## Files

`rtl/`: `bst_pkg` (types), `bram_partition` (dual-port level RAM),
`subtree_pipeline` (one subtree), `register_layer`, `subtree_labeler`,
`direct_buffer`, `queue_buffer` and `bst_accel` (top).

`tb/`: every testbench checks itself and ends by printing
`TB_RESULT checks=N failures=M`.

* `tb_bram_partition`, `tb_subtree_pipeline`, `tb_register_layer`,
  `tb_subtree_labeler`, `tb_direct_buffer`, `tb_queue_buffer`: unit tests
  against independent reference models: a software tree walk, a plain FIFO,
  and a slot model. `tb_subtree_pipeline` also checks the exact latency.
* `bst_accel_checker`: the shared stimulus and checking for the top. It loads
  the tree with the key of in-order position `p` = `2p+2` and value
  `7*key+1`, where node `(j,i)` of an `L`-level tree has in-order position
  `(2i+1)*2^(L-1-j)-1`. It then probes the latencies, runs the Equal, Random,
  Split and optional Mixed sets, and checks every result by its tag.
* `tb_bst_accel`: end to end at a small size, a 7-level tree with 4 subtrees,
  with both mappings. It requires stalls, register-layer hits, subtree hits,
  misses and port-2 results for each mapping.
* `tb_bst_accel_full`: the default configuration with the 64K and 256K key
  sets.
* `tb_bst_accel_direct_full`: the same with direct mapping.
* `tb_bst_accel_hyb4`: 4 subtrees on the full tree, with both mappings.

To run a test with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb rtl/bst_pkg.sv \
          tb/tb_bst_accel_full.sv --top-module tb_bst_accel_full -o sim
./obj_dir/sim
```

Each full-size test loads the million-node tree and runs 1M keys. It takes
about ten seconds of simulation after a short build.

## Departures from the paper and choices it leaves open

* **Slot freed in the same cycle.** Here an entry being read out can take a new
  key in the same cycle. One of the paper's illustrations of direct mapping
  shows a conflict on such a slot. Its Split results, which show no stalling
  with eight subtrees, are only possible if the slot is free.
* **Stall release rule for queue mapping.** The paper gives two rules. One says
  a stall ends once every buffer has at least one free entry. The other says a
  conflict occurs only when a buffer has fewer free entries than incoming keys.
  This design follows the second rule and accepts chunks whole.
* **Labels without a critical path.** Labels are computed with parallel
  compares and one count per key. The paper describes a serial check that
  lengthens its clock period; the result is the same.
* **Found keys.** Keys found in the register levels leave at the label stage on
  their own result lanes. Keys found inside a subtree still run to the end of
  the pipeline.
* **Designed here; the paper does not cover these:** the tree layout and its
  load port, result tags, the result ports and the absence of back-pressure,
  reset behaviour, read-first RAMs, and one pipeline stage per register level.
* **Not built:** the paper's comparison points. These are the single
  horizontal pipeline and the duplicated-tree variant, which stores 4 or 8 full
  copies of the tree. Also not built are tree construction (insert and delete)
  and the host or memory system that supplies keys.
