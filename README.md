# HePGA in SystemVerilog: a heterogeneous 3D processing-in-memory accelerator

Graph neural network (GNN) training is dominated by matrix-vector products.
These multiply by the graph adjacency matrix A (aggregation) and by each
layer's weight matrix W_l (combination). Processing-in-memory (PIM) crossbars
compute such products where the operands are stored. But no single memory
device suits every operand. ReRAM is dense but wears out quickly under
writes, and it is sensitive to heat. FeFET is fast and moderately dense.
SRAM tolerates heat and endless writes, but it is large.

HePGA stacks planar tiers of PIM processing elements (PEs). Each tier holds
one device type, and the tiers are joined by a 3D mesh network-on-chip with
through-silicon vias (TSVs). Which layer operand lives on which device and
tier is chosen offline by a multi-objective optimizer, and this RTL does not
contain the optimizer. The chosen stack, named **[R1 R2 F3 S4]**, places two
ReRAM tiers next to the heat sink. These hold A, the large weight matrices
and the activations. A FeFET tier comes next, for small, latency-critical
layers. The SRAM tier is farthest from the sink and computes the write-heavy
gradients of backpropagation.

This RTL implements that stack: 36 PEs in 3 x 3 x 4, four tiles per PE, and
tile contents as given in the HePGA paper's specification table. The analog
parts (crossbars, ADCs, sense amplifiers) are behavioural models. Everything
else is synthesizable logic: tile control, shift-and-add, routers, the
network interface and multicast.

## The stack at default parameters

| Tier (from heat sink) | Device | PEs | Tile contents (per tile, 4 tiles per PE) |
|---|---|---|---|
| 1 | ReRAM | 9 | 96 crossbars of 128 x 128 cells, 2 bits/cell, one 8-bit SAR ADC per crossbar, 1-bit wordline DACs |
| 2 | ReRAM | 9 | same |
| 3 | FeFET | 9 | 48 crossbars of 256 x 256 cells, 1 bit/cell, 256 one-bit sense amplifiers per crossbar |
| 4 | SRAM  | 9 | 9 arrays of 256 x 256 6T cells (8 KB each), one shared row of 256 sense amplifiers, array decoder |

In total there are 6912 ReRAM crossbars, 1728 FeFET crossbars and 324 SRAM
arrays. With 8-bit weights they hold 28.3 M + 14.2 M + 2.65 M = 45.1 M
weights. Node (x, y, z) is PE x + 3*(y + 3*z), with z = 0 as tier 1. The tier
order is a parameter (`TIERS` of `hepga_top`), so the homogeneous stacks the
paper compares against can be built too. An example is [R R R R], which
corresponds to ReMaGN.

## How a tile computes a matrix-vector product

All three tile types compute y = W^T x with 8-bit unsigned weights and
inputs and 24-bit results. Inputs are applied bit-serially, one bit plane
per pass. The tile types differ in how a bit line is read, and that sets
their schedules.

**Weight layout.** An 8-bit weight word occupies adjacent cells of one row,
least significant part first. In a ReRAM crossbar this is four 2-bit cells.
In FeFET and SRAM it is eight 1-bit cells. Every crossbar row therefore
holds 32 words. Output word j of a crossbar is the dot product of the input
vector with column-group j.

**ReRAM tile (analog column sums).** Every crossbar of the tile sees the
same input vector and holds a different block of output columns. For input
bit b, all 128 wordlines are driven by their 1-bit DACs at once. Each bit
line then carries sum_r x_r[b] * cell[r][c]. Each crossbar has one ADC, so
its columns are converted one per cycle. The code is then added into the
accumulator of the column's word, shifted left by b + 2*slice. A run takes
8 * 128 = 1024 cycles, with all 96 crossbars in parallel.

A column sum can reach 128 * 3 = 384, and the 8-bit ADC saturates at 255.
Dense, large operands are therefore clipped. This is real behaviour of such
a tile, and the model keeps it. The number of clipped conversions is
reported on `clip_count`.

**FeFET and SRAM tiles (row reads).** A 1-bit sense amplifier can only tell
a cell's two states apart, so it cannot digitize a multi-row sum. These
tiles activate one wordline per cycle. For input bit b and row r, the
sensed row gives the 32 weight words of that row. If x_r[b] = 1, each word,
shifted left by b, is added into its accumulator. This is exact. A run
takes 8 * 256 = 2048 cycles. In the FeFET tile all 48 crossbars work in
parallel, each with its own sense amplifiers. The SRAM tile has one
amplifier row for nine arrays, so a run uses the single array named when it
starts.

**Write latency.** After each accepted weight write, a tile refuses the next
write for `WR_LAT` cycles: 100 for ReRAM, 3 for FeFET and 1 for SRAM. These
are the device write times (about 100 ns, 3 ns and 1 ns) at an assumed
1 GHz clock. A host that streams weights sees the stall as backpressure
through the network.

**Timing of one run.** Suppose `start` is accepted in cycle 0. The first
result is then offered in cycle 8*COLS + 4 for ReRAM and 8*ROWS + 4 for
FeFET/SRAM. That is two pipeline stages of array read and conversion, one of
accumulation, and one to leave the drain state. Results then stream out one
per cycle with valid/ready, in index order. The index is xbar*32 + word, or
array*32 + word for SRAM.

## The network

Each PE has a seven-port router: Local, X+/X-, Y+/Y-, and Z+/Z- over the
TSVs, with Z+ pointing away from the heat sink. Each input port has a
4-flit FIFO. A sender may push only while the receiving FIFO is not full.
This is the FIFO-based flow control of the design, with no credits and no
virtual channels.

Packets are single 74-bit flits, routed in dimension order: X, then Y, then
Z. Each output port has a round-robin arbiter. Dimension-order routing of
single-flit packets on a mesh cannot deadlock. A flit addressed to the host
is routed to node (0,0,0) and leaves on its X- port. That port is the chip's
only external interface: `host_in_*` and `host_out_*` on `hepga_top`.

A lone flit needs hops + 2 clock edges from the sender's `valid` to
acceptance at the receiver. One edge enters the first FIFO, one is spent per
hop, and one ejects it. A TSV hop costs the same as a planar hop. Its
electrical data (5 um diameter, 25 um height, 37 fF, 20 mOhm) matter for
energy, not for logic.

## Programming the chip: messages and multicast

The layer mapping is decided offline, so the host loads it: it writes
weights and inputs, names destinations and starts runs. Every message is
one flit.

| Field | Bits | Meaning |
|---|---|---|
| dst | 7 | {host, z[1:0], y[1:0], x[1:0]}: destination node, or the host |
| src | 7 | sender node |
| op | 3 | operation, below |
| tile | 2 | tile inside the PE |
| xbar | 7 | crossbar (ReRAM/FeFET) or array (SRAM) |
| index | 16 | {row[8:0], word[5:0]} for weights, element number otherwise |
| data | 32 | payload |

| op | Effect at the PE |
|---|---|
| `OP_WRITE_W` | program weight word (row, word) of a crossbar with data[7:0] (waits out the write latency) |
| `OP_WRITE_X` | write input element index[8:0] of a tile with data[7:0] |
| `OP_RUN` | start a run on a tile; for SRAM, `xbar` picks the array |
| `OP_ADD_DEST` | append data[8:0] = {node, tile} to the tile's destination list (up to 4) |
| `OP_CLR_DEST` | empty the tile's destination list |
| `OP_RESULT` | an output from another tile: becomes input element (index mod ROWS) of the named tile, saturated to 255 |

**Multicast.** GNN activations H_l feed several PEs of the next layer, which
is the multicast traffic the design is built around. A PE sends every result
of a tile once to each entry of that tile's destination list, in list order.
Only then does it take the next result. An entry may be the host. So one
run can feed a layer on another tier and report to the host at the same
time.

**Layer chaining.** A received result overwrites an input element of the
destination tile directly. The 24-bit value is saturated to 8 bits, and no
activation function is applied. The host supplies any inputs not produced
on chip.

**Caveat.** A tile accepts inputs only when idle. The network interface
stops draining its router while a message waits for a busy tile. Two tiles
that stream results into each other's busy tiles through a congested
network can therefore deadlock. A mapping should not make a tile's
destination its own busy tile, and the host should start a consumer only
after its producer has finished. The testbenches follow this.

A complete layer chain, as run by the top-level testbench:

1. The host sends `OP_ADD_DEST` twice to ReRAM PE (0,0,0), tile 0. The
   entries are FeFET PE (1,1,2), tile 0, and the host.
2. It sends `OP_WRITE_W` and `OP_WRITE_X` for the layer-1 operands, then
   `OP_RUN`.
3. The results go to the FeFET tile's input buffer and to the host. The host
   then starts the FeFET layer, whose results go on to an SRAM tile, and so
   on.

## Parameters

All defaults are the full chip. The testbenches shrink them only to keep
simulations short.

| Module | Parameter | Default | Origin |
|---|---|---|---|
| hepga_top / noc_mesh_3d | MX, MY, MZ | 3, 3, 4 | 36 PEs, 9 per tier, 4 tiers |
| hepga_top | TIERS | {SRAM, FEFET, RERAM, RERAM} (index 0 = tier 1) | the [R1 R2 F3 S4] configuration |
| hepga_top | RR_XBARS, RR_ROWS, RR_COLS | 96, 128, 128 | tile specification |
| hepga_top | FE_XBARS, FE_ROWS, FE_COLS | 48, 256, 256 | tile specification |
| hepga_top | SR_ARRAYS, SR_ROWS, SR_COLS | 9, 256, 256 | tile specification |
| hepga_top | RR/FE/SR_WR_LAT | 100, 3, 1 | device write latency at an assumed 1 GHz |
| hepga_top | FIFO_DEPTH, DEST_MAX | 4, 4 | this design's choice |
| hepga_pkg | WBITS, XBITS, ACCW | 8, 8, 24 | this design's choice |
| reram_tile | CELL_BITS, ADC_BITS | 2, 8 | tile specification |

## What follows the paper, and what is this design's own

Taken from the paper: the tier structure and its order; 36 PEs on four
tiers of nine; four tiles per PE; every count and size in the tile table
(crossbars, array sizes, bits per cell, ADCs and their resolution, 1-bit
DACs, sense-amplifier counts, nine SRAM arrays with decoders); the 3D mesh
with TSV vertical links and FIFO-based flow control; the roles of the
devices; multicast of activations; device write latencies.

This design's own choices, where the paper says nothing: the clock (1 GHz
for the write-latency conversion); 8-bit unsigned data; weight layout in
cells; bit-serial inputs; the column-per-cycle ADC schedule; the row-serial
schedule for 1-bit sense amplifiers; the shared sense-amplifier row in the
SRAM tile; accumulator width; the flit format and message set; destination
lists for multicast; saturation when a result becomes an input; dimension-
order routing, round-robin arbitration and FIFO depth; the host port at
node (0,0,0).

Two points of the specification table are read in a particular way here.

- The paper counts 128 x 96 one-bit DACs per ReRAM tile, which is one set
  per crossbar. In this design every crossbar of a tile receives the same
  input vector, so a single 128-bit wordline pattern feeds all 96
  crossbars. Per-crossbar DACs would only matter if crossbars took
  different inputs.
- The paper lists nine column/row decoders for the nine SRAM arrays. Here a
  pair of nine-way one-hot decoders selects the array being written and the
  array that drives the shared sense amplifiers. Row and column selection inside an array is done by array
  indexing.

Not modelled:

- The offline mapping optimizer (AMOSA), thermal models and accuracy
  models. These are software that runs before the chip is configured.
- Temperature-dependent device non-idealities. The crossbars are ideal.
- TSVs and 1-bit DACs as parts: they are wires here.
- Signed arithmetic, activation functions and the backpropagation
  arithmetic itself. The SRAM tier offers the same MVM primitive with fast
  writes, but the paper does not describe a gradient datapath.
- Weight endurance counting, and the power, area and process figures of
  the tiles.

## Capacity against the evaluated workloads

The chip holds 45.1 M 8-bit weights in 8964 arrays.

- Fig. 3(a) of the paper shows the crossbar demand of a 4-layer GCN on
  Amazon2M. Read off that figure, weights plus one adjacency block come to
  about 1100 crossbars and activations to about 9000. That is close to the
  8964 arrays built. The figure is too coarse, and the paper trains layer
  by layer, so whether everything must be resident at once cannot be
  settled.
- Whole graphs (Reddit, about 114 M edges; Amazon2M, about 62 M) do not fit.
  The paper partitions them into subgraphs, and the subgraph sizes are not
  published.
- For transformer inference, BERT-Tiny (about 4.4 M parameters) fits.
  BERT-Base (about 110 M) and RoBERTa-base (about 125 M) do not fit
  resident and would need weight reloading.

The model sizes in these bullets are general knowledge, not figures from the
paper.

## Files

`rtl/` holds one module or package per file:

- `hepga_pkg`: types, message set and default sizes.
- `pim_crossbar`, `sar_adc`, `sense_amp`: behavioural models of the analog
  parts.
- `addr_decoder`, `reram_tile`, `fefet_tile`, `sram_tile`, `pim_pe`: the
  tiles and the PE.
- `flit_fifo`, `noc_router_3d`, `noc_mesh_3d`: the network.
- `hepga_top`: the chip.

`tb/` holds one self-checking testbench per module. Each computes expected
values independently and prints `TB_RESULT checks=N failures=M`.

| Testbench | What it establishes |
|---|---|
| tb_pim_crossbar | column sums and row levels of a full 128 x 128 array |
| tb_sar_adc | all 512 inputs, saturation and clip flag |
| tb_sense_amp, tb_addr_decoder | comparator threshold and hold; one-hot decode |
| tb_reram_tile | MVM with ADC clipping, run latency, write spacing |
| tb_fefet_tile, tb_sram_tile | exact MVM, latency, array selection |
| tb_noc_router_3d | dimension-order routing, ordering, backpressure |
| tb_noc_mesh_3d | latency of every source/destination pair; flooding with backpressure |
| tb_pim_pe | multicast, saturation of received results, write stalls |
| tb_hepga_top | ReRAM to FeFET to SRAM layer chain on a 2 x 2 x 4 chip; counts every mechanism |
| tb_gcn_layer | one GCN layer H = A(XW) on an 8-node graph: combination on a ReRAM tile, aggregation on a FeFET tile |

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/hepga_pkg.sv rtl/*.sv tb/tb_hepga_top.sv --top-module tb_hepga_top
./obj_dir/Vtb_hepga_top
```

Any other testbench builds the same way, with its own file and top module.

**Sizes simulated.** No testbench runs the chip at its default size. At the
defaults, Verilator turns the 13,824 crossbars into several hundred
megabytes of C++, mostly their unrolled 128- and 256-row loops. That takes
over an hour to compile. The largest simulations are:

- the whole chip at 2 x 2 x 4 PEs with reduced tiles (`tb_hepga_top`);
- the full 3 x 3 x 4 mesh (`tb_noc_mesh_3d`);
- one full 128 x 128 ReRAM crossbar (`tb_pim_crossbar`).

The tiles are parameterised by crossbar count and size only. The default
chip differs from the tested one in those numbers, not in its logic.
