# MEGA: a GNN layer accelerator for mixed-precision sparse features

A graph neural network layer computes `X' = A · (X · W)`. `X` holds the node features, `W` the layer weights, and `A` the sparse, normalized adjacency matrix. MEGA makes this cheap in memory in three ways:

1. **Per-node bitwidth.** Node features are quantized with a bitwidth chosen from the node's in-degree (Degree-Aware quantization). High-degree nodes tolerate fewer bits.
2. **Adaptive packages.** The non-zero feature values of consecutive nodes are packed into short, medium or long packages. Each package carries a 5-bit header, so no space is wasted on zeros or padding.
3. **Subgraph condensing.** The graph is split into subgraphs. Combined rows that a later subgraph will need from outside itself are collected once, while they are produced, into a small Sparse Buffer. Nothing has to be fetched again later.

The arithmetic that consumes the packages is **bit-serial**. A group of up to 8 non-zero values is fed to the multipliers one bit-plane per cycle. A value of `b` bits therefore costs `b` cycles, and narrow nodes run faster.

This repository is a SystemVerilog implementation of that accelerator core. It covers:
- the package decoder;
- the bit-serial combination tiles;
- the condensing logic;
- the aggregation array;
- the re-encoder that writes the next layer's input;
- all on-chip buffers;
- a controller that runs one layer end to end.

## Dataflow of one layer (`mega_top`)

The layer is computed one block of 32 output columns at a time. Each block goes through three steps.

1. **Combine and condense (phase A).** Every node `j` is processed in ascending order:
   - The four Combination Tiles each decode one 32-feature slice of the node.
   - The tiles multiply their slices with the 4-bit weights of the block.
   - The sum is requantized to a 4-bit row `B_j`.
   - `B_j` goes to three places in the same pass:
     - the Combination Buffer (indexed by node ID);
     - the Condense Unit, which copies it into the Sparse Buffer region of every subgraph that lists `j` as an outside source;
     - the Aggregation Tile, if subgraph 0 has an edge from `j`. Subgraph 0 is therefore finished at the end of phase A.
2. **Encode.** The 16-bit sums of the finished subgraph are:
   - quantized with each node's degree-dependent bitwidth;
   - packed into adaptive packages;
   - written back to the Input Buffer, together with one 32-bit non-zero mask (bitindex) per node.
3. **Aggregate the other subgraphs (phase B).** For each subgraph `s = 1, 2, …`:
   - The Aggregation Buffer is cleared.
   - Every source column of `s` is aggregated, in ascending source order.
   - A source row comes from the Sparse Buffer when the Condense Unit finds it at the head of `s`'s eID FIFO; otherwise it comes from the Combination Buffer.
   - Then `s` is encoded.

The output of a column block is one contiguous package stream. The next layer reads it as one of its four input slices. The host loads all buffers through write ports, standing in for DRAM. It then pulses `start`; `done` pulses when every column block has been written.

## The Adaptive-Package format

A package is 64, 128 or 192 bits (1, 2 or 3 words of the Input Buffer), with this layout:

| bits | field |
|---|---|
| 1:0 | Mode: 00 = 64 bit, 01 = 128 bit, 10 = 192 bit |
| 4:2 | Bitwidth `b`: 1–7 coded as itself, 8 coded as 000 |
| 5 + k·b … | value `k`, `b` bits, LSB first |

- Only non-zero values are stored. The positions of the non-zeros come from the node's bitindex, so a zero slot, or a slot that no longer fits, ends a package.
- All values in one package share one bitwidth.
- The encoder appends values until the bitwidth changes or the next value would not fit in 192 bits. It then closes the package with the shortest mode that holds it.
- A node's values may therefore continue in the next package. The stream is consumed strictly in node order, so no per-node pointer is needed.

## Combination Tile internals

The tile is the hardest part to follow.

### Decoder (`decoder`, `weight_index_gen`)

- The decoder holds the current package window (3 words). It advances its pointer by the package's length once all values in the package are used.
- It cuts a node into groups of up to 8 values from the same package.
- For a group of `b`-bit values it emits `b` bit-planes, bit 0 first. Each plane has 8 bits (bit `i` of each value), the shift amount `i`, and the group's base ordinal.
- In parallel, the Weight Index Generator turns the node's bitindex into ordinals: a prefix count gated by the mask bit. Row `r` of the slice gets `k` if it holds the `k`-th non-zero value, and 0 otherwise.

### Multiply (`combination_unit`, `c_pe`)

- Planes pass through a Bit FIFO (`sync_fifo`) to the Combination Unit.
- A crossbar routes weight row `r` to multiplier input `j` when `ordinal[r] == base + j + 1`.
- Each of the 32 C-PEs computes one output column: it adds the weights whose plane bit is set, shifts the sum by the plane's bit position, and accumulates.
- The 32 C-PEs form two halves. The right half receives each plane one cycle after the left and loads its weights at that moment. A new group therefore cannot start in the cycle right after another group started, so a 1-bit group takes 2 cycles. This is the crossbar stall, and it is reported on `xbar_stall`.
- The result is valid 2 cycles after the last plane of a node.

### Summation and requantization (`combination_engine`)

`B[c] = clamp(round(y[c] · α · s[c] / 2^16), −7, 7)`, where:
- `α` (Q8.8) depends on the node's degree and undoes its input step;
- `s[c]` (Q8.8) is the column scale.

## Condense Unit (`condense_unit`)

- There is one 8-entry eID FIFO per subgraph (16 in all). Each FIFO holds the next ascending IDs of the outside nodes that the subgraph needs.
- Each FIFO is refilled from the Edge Buffer, one word per cycle, lowest FIFO first.
- **Phase A.** An incoming node ID is compared with all FIFO heads at once. For each match, the row is written at the region pointer of that subgraph (the Address Reg) and the FIFO is popped. Several matches are written one per cycle, and the producer is stalled meanwhile. The producer also waits while a FIFO is empty but its list is not exhausted.
- **Phase B.** The same FIFO and pointer are re-armed and used to read the rows back in the same order.
- The Sparse Buffer is split into 16 equal regions of 128 rows. A region that fills up raises an overflow pulse; the row is not stored. When that entry is looked up later, the unit reports a spill, and the row is read from the Combination Buffer. This stands in for the write-back to DRAM.

## Aggregation and encoding

- **Aggregation Tile.** 8 lanes × 32 Aggregation Units. Each cycle the tile takes up to 8 edges of one source column. It multiplies the 8-bit edge value by each of the 32 features of `B_j` and adds the product to the destination row in the Aggregation Buffer. The 16-bit sums saturate.
- **Aggregation Buffer.** Clearing between subgraphs takes one cycle, using a valid bit per row.
- **Encoder.** 32 QN units compute `q = min((max(v,0)·scale + 2^11) >> 12, 2^b − 1)`. The node's bitwidth `b` and `scale` (Q4.12) come from the degree table. The encoder then compacts the non-zero values, places them into the package register, and writes completed packages (1–3 words) and the bitindex.

## Parameters (defaults)

| block | default |
|---|---|
| Combination Engine | 4 tiles × 8 bit-serial inputs × 32 C-PEs; crossbar 32 × 8 |
| Aggregation Tile | 256 AUs (8 × 32) |
| Condense Unit | 16 eID FIFOs × 8 entries |
| Input Buffer | 8192 × 64 bit (64 KB) + 2048 bitindex rows |
| Weight Buffer | 96 rows of 32 × 32 × 4 bit (48 KB), 256 column scales, 64-entry degree table |
| Combination Buffer | 6144 × 128 bit (96 KB) |
| Sparse Buffer | 2048 × 128 bit (32 KB) |
| Aggregation Buffer | 2048 × 32 × 16 bit (128 KB) |
| Edge Buffer | 1024 columns, 4096 edges, 1024 eIDs, 2048 degrees (about 24 KB) |

## Where this design departs from or adds to the published description

- **Scope limits.**
  - The input width is limited to 4 × 32 = 128 features per layer; wider inputs would need several passes, which are not built.
  - One `start` runs one layer on a graph held entirely on chip.
  - Streaming larger graphs from DRAM is not built, and neither is layer-to-layer sequencing.
  - Because of these limits, the evaluated datasets do not fit as a whole. Cora already has 2708 nodes and 1433 input features.
- **Number formats and rules chosen here.** The quantization rounding, the requantizer's fixed-point format, the 8-bit edge values, the 16-bit saturation and the ReLU in the QN units are all this design's choices.
  - The feature values are treated as unsigned `b`-bit numbers (the full range `1 … 2^b−1`). This follows the worked package example rather than the signed clamp of the quantization formula.
- **Formats chosen here.** The exact bit layout of the package header, the coding of 8 bits as `000`, and the Edge Buffer's table layout are this design's choices.
- **Ping-pong buffering.** It is done by address regions, not by duplicated arrays.
- **Not modelled.** The clock rate and the off-chip memory are not modelled.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints `TB_RESULT checks=N failures=M`.

- `tb_mega_top` runs the whole core at reduced buffer sizes: a 60-node graph, 4 subgraphs, 2 column blocks.
- `tb_mega_top_full` runs the same test with every parameter at its default: 240 nodes, 8 subgraphs, 2 column blocks.

Both testbenches work the same way:
- They check every output word and bitindex row against an integer model.
- They count each mechanism and fail if one never occurred. The mechanisms are: crossbar stalls, eID refills, multi-subgraph matches, Sparse Buffer hits, overflows and spills, Combination Buffer reads, saturation, and nodes split across packages.

Example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_mega_top \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/mega_pkg.sv tb/tb_mega_top.sv
./obj_dir/Vtb_mega_top
```

The full-size test takes about one minute to build and run with four threads.
