# Flexagon: one datapath for three sparse matrix-multiplication dataflows

Sparse DNN layers are sparse x sparse matrix multiplications (SpMSpM),
C = A x B, with both operands held in compressed form. Three loop orders are
known for SpMSpM and each one wins on some layers and loses badly on others:

* **Inner product (IP)**: C[m][n] is a dot product of row m of A and column n
  of B. The two fibers must be *intersected* (only matching k contribute).
  Outputs are produced complete, but much work is wasted on non-matching
  coordinates when the operands are very sparse.
* **Outer product (OP)**: column k of A times row k of B gives a whole partial
  matrix. No intersection, but every partial sum must be stored and later
  *merged* (added by coordinate) with the others.
* **Gustavson's (Gust)**: row m of C is the sum of the rows k of B scaled by
  A[m][k]. Partial rows are merged on the fly.

Each of the three also has an "N-stationary" variant, obtained by computing
C^T = B^T x A^T, that is, by swapping the roles of the operands.

The Flexagon idea is that the three dataflows need the same three pieces of
hardware: a network that distributes operands to multipliers, a row of
multipliers, and a network that combines products. An adder tree (for dot
products) and a merger (for partial-sum fibers) can be one tree whose nodes
either *add* or *compare coordinates and add on a match*. With that
**merger-reduction network (MRN)**, and memory structures shaped for how each
operand is accessed, one accelerator runs whichever dataflow an offline
mapper picks for each layer.

This repository holds synthesizable SystemVerilog for that accelerator in
its main configuration: 64 multipliers, a 63-node MRN, a 256-byte FIFO for
the stationary operand, a 1 MiB cache for the streaming operand and a
256 KiB partial-sum memory. It also holds self-checking testbenches for every
block and an end-to-end test that multiplies random sparse matrices in all
dataflows.

## Data representation

Everything is built from one 33-bit element, `elem_t` in
`rtl/flexagon_pkg.sv`:

| field   | bits | meaning |
|---------|------|---------|
| `eof`   | 1    | end-of-fiber token (carries no data) |
| `coord` | 16   | coordinate of the element inside its fiber |
| `val`   | 16   | value, two's complement, wrap-around arithmetic |

In DRAM an element is one 32-bit word `{coord, val}`; the `eof` bit only
exists on chip. A compressed matrix is a pointer vector `p[f]` (word index
of the first element of fiber f, with `p[nfib]` = total) followed by the
element vector. Fibers are rows (CSR) or columns (CSC), whichever the
dataflow needs:

| dataflow | stationary operand (loaded into the multipliers) | streaming operand (read through the cache) | output |
|---------|---------|---------|------|
| IP(M)   | A in CSR (rows, coord = k) | B in CSC (columns, coord = k) | C in CSR |
| Gust(M) | A in CSR | B in CSR (rows, coord = n) | C in CSR |
| OP(M)   | A in CSC (columns, coord = m) | B in CSR | C in CSR |
| X(N)    | B^T operand as above | A^T operand as above | C^T |

The output is written as a compressed matrix too: word `{col, val}` at
`c_data_base + j` for the j-th non-zero written, and `p_C[row] = j` at
`c_ptr_base + row` when a new row starts. Rows with no output get no
pointer and the closing pointer is not written; the trace port gives
(row, col, value) of every output element.

## How a tile runs

The mapper (software, not part of this RTL) cuts the stationary operand into
*tiles*: a range `[fib_lo, fib_hi)` of its fibers holding at most 64
non-zeros. For each tile it sets the configuration ports of `flexagon` and
pulses `start`. The control unit (`rtl/control_unit.sv`) then goes through
these phases:

1. **Pointers.** It reads `p[fib_lo..fib_hi]` from DRAM and assigns element
   i of the tile to multiplier i. Each multiplier thereby belongs to one
   fiber of the stationary operand; consecutive multipliers of one fiber form
   a **cluster**.
2. **Stationary phase.** The STA FIFO's filler streams the tile's elements
   from DRAM; the control unit pops them and the distribution network sends
   element i to multiplier i, which latches it (multiplier in LOAD mode).
3. **Streaming phase.** Multipliers switch to MULT mode.
   * *IP*: for each streaming fiber n, its elements (k, b) are read from the
     cache one per cycle and **multicast** to every multiplier whose
     stationary coordinate equals k (the intersection is done by comparing
     k against all 64 stationary coordinates at once). Multipliers that
     received nothing for this n then get a **zero bubble**, so every
     multiplier delivers exactly one product per n and each cluster's part of
     the MRN, in adder mode, delivers C[m][n].
   * *Gust*: multiplier i (holding A[m][k]) is fed all of fiber k of the
     streaming operand followed by an end-of-fiber token, round-robin over the
     multipliers, one element per cycle. The MRN, in comparator mode, merges
     the scaled rows of each cluster into the final row m.
   * *OP*: fed like Gust, but products **bypass** the MRN and are stored as
     partial fibers (m, k) in the PSRAM.
4. **Merging phase (OP only).** Row by row, smallest row first, the partial
   fibers of the row are read back from the PSRAM (Consume) and fed to the
   first multipliers, now in FWD (forwarding) mode, one fiber per multiplier;
   the MRN in comparator mode merges them into the final row.

A phase ends when the tile writer has seen the number of outputs (IP) or end
tokens (Gust, OP) the control unit expects, and its write buffer is empty.
`done` then pulses.

## The merger-reduction network

`rtl/mrn.sv` is a binary tree of 63 `mrn_node`s over the 64 multipliers,
numbered as a heap (node 1 is the root, node n has children 2n and 2n+1,
multiplier i is leaf 64+i). Every node has two outputs: **up** to its parent
and **mem**, its own port towards the output memory. The root's up output is
one more port, so there are 64 output ports.

Each node, as set by its configuration (`node_cfg_t`), either

* **combines** its two inputs and sends the result up or to its mem port.
  In adder mode it adds the two values. In comparator mode it looks at the
  heads of the two sorted input fibers: equal coordinates are added and both
  consumed, otherwise the lower coordinate goes out alone; an end token on
  one side lets the other side drain, and two end tokens make one end token;
* or passes its left and right inputs on separately, one up and one to mem.

All links are valid/ready handshakes with a register at each node output,
so the tree is a pipeline that stalls cleanly; in comparator mode the
inputs of a node are consumed at different rates.

**Configuration** (`rtl/mrn_config.sv`) is combinational and works bottom-up
on the cluster map. Each subtree offers its parent at most one stream, its
*candidate*. At a node, two candidates of the same cluster are combined; the
result goes up if the cluster has multipliers outside the subtree, otherwise
to mem, where it is complete. Candidates of different clusters are split: the
one that continues outside the subtree must go up, a complete one goes to
mem. Each port is labelled with the output row it carries (`mem_row`,
`root_row`), which is how the output knows its row.

This fails in one case: a subtree whose leftmost and rightmost multipliers
belong to two *different* clusters that both continue outside it. Both would
need the single up link. The original design solves this with extra lateral
links between neighbouring nodes (an augmented tree). **These links are not
built here.** `mrn_config` raises `conflict` instead, the top turns it into
`error`, and the mapper must choose tiles that avoid such maps. The
testbenches contain a mapper that does this by growing a tile fiber by fiber
and stopping before the map becomes unroutable; a single fiber is always
routable. The OP streaming phase bypasses the tree, and the OP merging phase
uses one cluster, so neither can conflict.

## Memory structures

* **STA FIFO** (`rtl/sta_fifo.sv`): 64 words (256 bytes). Its filler reads
  the tile's elements from DRAM by incrementing an address register, never
  requesting more than the free space. It has a single port: no pop in a
  cycle in which a word arrives from DRAM.
* **STR cache** (`rtl/str_cache.sv`): 1 MiB, 128-byte lines, 16 ways
  (512 sets), read-only, round-robin replacement. It is addressed by word
  offset from the start of the streaming operand (`str_base`), so tags stay
  short and the same streaming operand stays cached across tiles. A hit
  answers in the next cycle; a miss fetches the 32-word line from DRAM. A tile
  started with a different `str_base` invalidates the cache.
* **PSRAM** (`rtl/psram.sv`): 64 sets (indexed by output row modulo 64) of
  16 blocks of 64 words. A block's tag holds (row, k) with First/Last
  pointers. PartialWrite(row, k, e) appends to the tail block of fiber
  (row, k), taking a free block of the set when the fiber is new or its tail
  block is full; the blocks of one fiber are chained. Consume(row, k) returns
  the next element one cycle later, frees blocks as they empty, and answers
  "not found" once the fiber is exhausted, which the merge phase uses as the
  end of the fiber. A write to a set with no free block is dropped and
  `psram_overflow` pulses, so the mapper must keep, per tile, the blocks
  needed by each set at or below 16.
* **Tile writer C** (`rtl/tile_writer_c.sv`): routes partial sums to the
  PSRAM and final outputs through a non-linearity (ReLU, enabled by
  `relu_en`), drops zeros, and writes through an 8-entry write buffer to
  DRAM. Its output counter is reset by a tile that starts at fiber 0, so the
  tiles of one output matrix append to each other.

## Interfaces and timing of the top (`rtl/flexagon.sv`)

Parameters: `LEAVES = 64` multipliers, `DN_IN = 16` distribution-network
inputs, `OFF_W = 24` bits of cache word offset.

| group | signals | notes |
|------|---------|------|
| tile | `start`, `df` (`DF_IP`, `DF_OP`, `DF_GUST`), `relu_en`, `sta_ptr_addr`, `sta_elem_addr`, `fib_lo`, `fib_hi`, `str_base`, `str_nfib`, `str_ptr_off`, `str_elem_off`, `c_data_base`, `c_ptr_base` | word addresses; the streaming pointer and element vectors are at `str_base + str_ptr_off` and `str_base + str_elem_off` |
| status | `busy`, `done`, `error` | `done` is a one-cycle pulse; `error` is valid with it |
| DRAM read | `mem_req_valid/addr/id/ready`, `mem_resp_valid/data/id` | one request per cycle; responses in order, with the request's id, and cannot be stalled |
| DRAM write | `mem_wr_valid/addr/data/ready` | compressed output |
| trace | `out_valid/row/col/val` | each final output as it is written |
| events | `str_miss`, `psram_overflow`, `mrn_conflict` | |

All state is reset by the active-low asynchronous `rst_n`. One element
(possibly multicast) is distributed per cycle; the multipliers, nodes and
writer each take at most one element per cycle.

## Where this RTL departs from the original design

* The MRN has no lateral links (see above); the mapper must avoid cluster
  maps that need them.
* The distribution network is a per-output source select (a crossbar with
  all-or-nothing multicast), not a Benes or tree network, and the control
  unit drives only one of its 16 inputs, so distribution is one element per
  cycle rather than 16.
* The STR cache has one read port instead of 16 banks; the PSRAM serves one
  Consume per cycle instead of reading several fibers in parallel.
* Gustavson's dataflow requires whole rows of the stationary operand in a
  tile (at most 64 non-zeros per row); partial output rows are not
  supported.
* In OP, each tile is merged on its own: a layer split into several OP tiles
  gives one partial output matrix per tile, which must be added afterwards.
* Number format: 16-bit integers with wrap-around. The original evaluates
  timing and area only and does not fix a number format.
* The DRAM is outside the design: a single in-order read port and a write
  port stand for the HBM interface.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog:

| testbench | what it checks |
|-----------|----------------|
| `tb_mult_switch` | LOAD, MULT, FWD modes with random stalls; one element per cycle |
| `tb_mrn_node` | comparator merge of random sorted fibers, adder mode, split routing |
| `tb_mrn_config` | 4000 random cluster maps routed through the produced configuration; `conflict` exactly on unroutable maps |
| `tb_mrn` | 8-leaf tree with the configuration logic: cluster sums and merges under back-pressure |
| `tb_dist_network` | multicast delivery and all-or-nothing back-pressure, 16 x 64 |
| `tb_sta_fifo` | tiles of up to 4x the FIFO depth against a DRAM model |
| `tb_str_cache` | data, 1-cycle hit latency, miss count bounds, invalidation (reduced 2 KiB size) |
| `tb_psram` | interleaved writes and consumes, fibers spilling into further blocks, block release, overflow (reduced size) |
| `tb_tile_writer_c` | PSRAM writes, compressed output words and pointers, ReLU, zero dropping |
| `tb_control_unit` | 16-multiplier accelerator: all dataflows on 12x12 by 12x72 matrices, plus rejected tiles |
| `tb_flexagon` | full-size accelerator, default parameters: IP(M), Gust(M), OP(M), Gust(N) and IP(M)+ReLU on 20x24 by 24x72 random matrices |

The two system tests contain a DRAM model and a mapper model (tiling,
routability, PSRAM budget) and check every output element against a
reference product computed in the testbench. They count the mechanisms
exercised and fail if any never occurs: each dataflow, DN multicast, zero
bubbles, equal-coordinate adds in comparator nodes, cache misses, a partial
fiber spilling into a second PSRAM block, and ReLU drops.

To run one with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal rtl/flexagon_pkg.sv \
  $(ls rtl/*.sv | grep -v flexagon_pkg) tb/tb_flexagon.sv \
  --top-module tb_flexagon -o sim
./obj_dir/sim
```

The package must come first. `-Wno-fatal` keeps width warnings of the
testbenches from stopping the build. The full-size test runs in a few
seconds.
