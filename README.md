# GCN training accelerator with a hypercube message-passing network

This is a SystemVerilog design of an accelerator for graph convolutional
network (GCN) training. It has sixteen computation cores joined by a
four-dimensional hypercube on-chip network. The graph is cut into blocks of
64 x 64 nodes. A central router plans, clock by clock, how every neighbour
message travels from the core that holds the neighbour's features to the core
that aggregates it. Each core does both phases of a GCN layer on one
16 x 16 multiply/adder-tree array:

- the combination phase, `y = W x`;
- the aggregation phase, `agg[B] += val * y[D]`.

The top module is `gcn_accel_top` (`rtl/gcn_accel_top.sv`). Shared types and
sizes are in `rtl/gcn_pkg.sv`.

## Data sizes

| Quantity | Value |
| --- | --- |
| Cores | 16, each a vertex of a 4-D hypercube. Link k joins core i and core i XOR 2^k. |
| Nodes per core | 64. One pass therefore covers a 1024-node subgraph. |
| Feature | 512 bits = 16 FP32 lanes. |
| Packet | 518 bits: a feature plus a 6-bit aggregate node id. A link carries 522 bits, because the 4-bit destination core travels with the packet. |
| Node index | 10 bits. Bits [9:6] are the core; bits [5:0] are the node inside that core. |
| Weight tile | 16 x 16 FP32. |

## How a pass works

The host (through the top's plain ports) loads three things:

- node features into each core's Feature Buffer;
- a weight tile into the Weight Bank;
- the edges of up to 64 blocks, one block at a time.

A block holds the edges from source core C to destination core A. It belongs
to one of four groups, and each group has one block per destination core.

### 1. Graph Converter and Index Compressor

The Graph Converter (`graph_converter`) is an insertion sorter. It orders a
block's COO edges by row. In backward mode it swaps row and column first, so
the same stored edges give `A^T`.

The Index Compressor (`index_compressor`) cuts each index into core id and
local id. It then groups consecutive edges with the same aggregate node B
into one *message*; the `last` bit closes each message. The edges go into
the source core's Block Message buffer. The block header `(group, A, C, N)`,
where N is the number of messages, goes to the router.

### 2. System Controller

The System Controller (`system_controller`) runs these steps in order:

1. **Weight sync.** The Weight Bank broadcasts W to all cores, or W^T
   through the Data Transposer in backward mode.
2. **Clear** the Aggregate Buffers.
3. **Combine.** Every core computes `y = W x` for its nodes.
4. **Routing rounds**, repeated while any block still has messages.
5. **Drain**, until every core has been quiet for 8 clocks.

### 3. One routing round (`router_st`)

This is the hardest part of the design.

**Start points (`msg_start_gen`).** For each of the 64 (group, destination)
entries with N > 0, the generator emits its source core as a start point and
decrements N. That gives up to 64 messages, which is the hypercube's limit
of 64 directed links.

**Routing computation (`route_calc`).** It plans the paths of those
messages:

- **XOR array** (`xor_array`). `position XOR destination` gives, for each
  message, the set of dimensions it still has to cross. Its popcount is the
  remaining step count.
- **Routing Set Filter** (`routing_set_filter`). At most four messages may
  enter one core in a clock. When more would, the filter keeps the four with
  the fewest alternatives. It never empties a set.
- **Sorter** (`path_sorter`). Messages with fewer steps left are served
  first.
- **Routing Table Filler.** Each message in sorted order picks one link
  still in its set. The "random" choice is a rotating offset from an LFSR.
- **Routing Set Remover** (`routing_set_remover`). Once a message takes a
  directed link, that link is removed from every other message at the same
  core. This gives one flit per link per clock.

A message whose set becomes empty does not move in that row: it waits one
row, in the paper's "virtual channel". The output is one row per network
clock, up to 16 rows: for every message, "move on dimension k" or "wait".

**Instruction Generator (`instr_gen`).** It turns the rows into one routing
instruction per core per clock, in two phases:

1. **Header phase.** Four clocks, one per group. Each header tells a core to
   merge its next Block Message for destination A. The core computes
   `m = sum val * y[D]` and stores the packet in Transfer Register File slot
   `group`.
2. **Row phase.** Once every core reports its merge done, the rows play one
   per clock. Each instruction says which links receive, which links send,
   which slot each outgoing flit is read from, and which slot an incoming
   flit is stored in.

The generator tracks every message's current core and slot, and a free-slot
pool for each core. A slot freed by a send can take an arrival in the same
clock.

**Delivery.** A flit whose destination is the receiving core is not stored.
It goes to that core's Reduced Register File, which takes up to five packets
a clock (four links plus the local path) and drains one a clock. From there
the packet enters the Neighbor FIFO. The arbiter (`fifo_arbiter`) then
serves the Neighbor FIFO, and the array adds `1.0 * m` into `agg[B]`.

**Local messages.** When source equals destination, a message never enters
the network; its packet goes straight to the Reduced Register File.

### Inside a core (`gcn_core`)

Each core has:

- a Feature Buffer, a Neighbor Buffer, a Data Output Buffer and an Aggregate
  Buffer, each 64 x 512 bits;
- a Block Message buffer of 1024 entries;
- the weight tile in registers;
- two 8-deep FIFOs and the arbiter;
- the Reduced Register File;
- the array (`mac_tree_array`), with 256 TF32 multipliers and 256 FP32
  adders.

The array has two output modes:

- **Tree mode** gives a matrix-vector product, used to combine.
- **Direct mode** gives 16 independent lane MACs, used to merge and
  aggregate.

Only one aggregation is in flight at a time, so two packets for the same B
never race.

### Other blocks

- **Weight Bank** (`weight_bank`). Applies SGD to one row per clock:
  `W <- W - lr*G`.
- **Sequence Estimator** (`seq_estimator`). Computes the Table-1 time
  complexities of combination-first and aggregation-first from b, n, n', d,
  h, e and c, and reports the cheaper order. The datapath always combines
  first; the estimator's answer is reported only.

## Departures and simplifications

- **Routing instruction: 45 bits instead of the paper's 25.** It names
  Transfer Register File slots explicitly: a send slot and a store slot for
  each of the 4 links. The head, receive, open-channel and destination
  fields follow the paper.
- **Flit: 522 bits on a link.** The 4-bit destination core travels with the
  518-bit packet.
- **N is 7 bits.** A block can hold 64 messages, and the 6-bit field printed
  in the figure holds only 63.
- **Arithmetic is simplified.** Results are truncated (round toward zero),
  subnormals are flushed to zero, and overflow saturates. Because
  aggregation multiplies by 1.0 in the TF32 multiplier, messages are
  truncated to TF32 when they are aggregated.
- **One 16 x 16 weight tile per pass.** Wider layers must be tiled by the
  host.
- **Not built:** HBM, the DMA engines and the host/PCIe link. Their data
  enters and leaves through the top's plain load and readback ports.

## Testbenches

Every block has a self-checking testbench `tb/tb_<module>.sv` that ends by
printing `TB_RESULT checks=<n> failures=<n>`.

`tb/tb_gcn_accel_top.sv` runs the whole design with default parameters. It
uses random graphs over all 64 blocks, with group 0 core-local, and does:

- a forward pass and a backward pass (mode switch, W^T broadcast);
- a comparison of every Aggregate Buffer against a reference model;
- an SGD update;
- both answers of the estimator;
- a deliberate Graph Converter overflow.

It also counts virtual-channel waits, multi-round operation and clocks in
which eight or more packets are delivered at once, and counts a failure if
any of these never happened. In this graph no core ever receives more than
one network packet in a clock, because its sources sit at different hop
distances. The four-arrivals-per-core peak is exercised in
`tb_hypercube_noc` instead.

A default-size run does 27 routing rounds per pass, with 116
virtual-channel waits over the two passes, and every Aggregate Buffer
matches the reference exactly.

Building the full-size top with verilator takes about eight minutes. The
simulation itself takes seconds.
