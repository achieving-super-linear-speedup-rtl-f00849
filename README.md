# Multi-FPGA CNN inference with shared-tile transfer (XFER)

## The idea

A tiled CNN accelerator on one FPGA is often limited by off-chip memory
bandwidth, not by its multipliers. Each tile of input feature maps (IFM) or
weights must come from DRAM, and the engine waits for it. Split a layer
over several FPGAs and each FPGA gets a smaller share of the work. But
most partitions make neighbouring FPGAs read the *same* tiles:

- FPGAs that split the output channels need the same IFM tiles.
- FPGAs that split the batch, the output rows or the output columns need
  the same weight tiles.

XFER does not have every FPGA read the whole shared tile from its own
memory. Each FPGA of a group reads only `1/p` of the tile, and the groups
swap the rest over direct board-to-board links. Each memory bus then
carries `p` times less traffic for that tile. A layer that was memory-bound
on one FPGA can become compute-bound on `p` FPGAs. That is how `p` boards
can run more than `p` times faster than one: the speedup is super-linear.

This repository is the RTL of one FPGA (a *node*) of such a cluster. The
nodes are wired as a 2D torus:

- The **row ring** joins the FPGAs that share IFM tiles. They split the
  output channels, with factor `Pm`.
- The **column ring** joins the FPGAs that share weight tiles. They split
  the batch, rows or columns, with factor `Pb*Pr*Pc`.

Each node has two outgoing and two incoming links: one pair per ring.

## One node: the tiled accelerator

The node computes the standard loop nest of a convolution layer:

- `M` output channels, `N` input channels
- an `R x C` output map
- a `K x K` kernel with stride `S`

The loops are tiled by `Tm x Tn x Tr x Tc`. The default parameters are the
16-bit fixed-point configuration:

| Parameter | Default | Meaning |
|---|---|---|
| `TM` | 128 | output channels computed in parallel |
| `TN` | 10 | input channels computed in parallel (`TM*TN` MACs per cycle) |
| `TR`, `TC` | 7, 14 | output rows and columns per tile |
| `IP`, `WP`, `OP` | 4, 8, 4 | 16-bit words per beat on the IFM, weight and OFM streams |
| `KMAX`, `SMAX` | 11, 4 | largest kernel and stride the buffers are sized for |
| `PMAX` | 4 | largest ring size |

The blocks, all in `rtl/`:

- **`superlip_ctrl`** runs the loop nest. The outer loop walks
  batch/row/column tiles, the middle loop walks output-channel tiles
  (`n_m`), and the inner loop walks input-channel tiles (`n_n`).
  - One *execution* is one inner iteration. It convolves `Tn` IFM channels
    with a `Tm x Tn x K x K` weight tile.
  - A *step* loads the tiles of execution `s` into one half of the input
    buffers. In the same step the engine computes execution `s-1` from the
    other half.
  - A step ends when its slowest part ends. So a step lasts about
    `max(tI, tW, tComp)` plus a few cycles of hand-over.
- **`xfer_loader`** (two instances) fills the IFM buffer and the weight
  buffer. It takes the node's own part of a tile from memory and the other
  parts from its ring (see below).
- **`input_tile_buffer`** (two instances) is double-buffered and banked.
  - The IFM buffer has `Tn` banks; the weight buffer has `Tm*Tn` banks.
  - Word `i` of a tile goes to bank `i mod BANKS`, address `i div BANKS`.
  - The engine reads one word from every bank in each cycle.
- **`conv_engine`** does `Tm*Tn` multiplies per cycle.
  - For each output pixel it walks the `K*K` kernel positions and keeps
    `Tm` accumulators.
  - It then adds the pixel's previous partial sum and writes the result
    back. On the first input-channel tile it adds zero instead.
  - An execution takes `K*K*Tr*Tc + 3` cycles.
- **`ofm_buffer`** is double-buffered: `Tm` banks of `Tr*Tc` 32-bit partial
  sums.
  - While the engine accumulates one output group into one half, the other
    half drains to memory.
  - If the engine needs a half that is still waiting to be stored, the
    controller stalls it and raises `ofm_stall`.
- **`ofm_store`** drains a finished half pixel by pixel.
  - It sends `Tm/OP` beats of `OP` words per pixel, channel innermost.
  - Each value is shifted right arithmetically by `frac` and saturated to
    16 bits.
  - A tile takes `Tr*Tc*(Tm/OP+1)+2` cycles.
- **`async_fifo`** (four instances) carries link beats between the
  accelerator clock `clk` and the link clock `link_clk`. The link clock is
  the user clock of the serial-link IP. The FIFOs use Gray-coded pointers
  with two-flop synchronisers.

### Timing model

For one node, with `Trin = (Tr-1)S+K` and `Tcin = (Tc-1)S+K`:

```
tComp = K*K*Tr*Tc
tI    = ceil(Tn*Trin*Tcin / IP) / p_row      (memory part of one IFM tile)
tW    = ceil(Tm*Tn*K*K / WP)  / p_col        (memory part of one weight tile)
tO    = Tr*Tc*Tm / OP
Lat1  = max(tComp, tI, tW)                   one step
Lat2  = max(n_n * Lat1, tO)                  one output group
```

Because the store of group `g` overlaps the computation of group `g+1`,
a layer of `G = n_outer*n_m` groups takes about `G*Lat2 + Lat1 + tO`
cycles. There are a few extra cycles of hand-over per step.

The formula usually quoted for this scheme is `Lat = G*Lat2 + tO + Lat1`,
where `G*Lat2` already includes the last group. That formula counts the
last store one time too many. The testbenches accept run times between
`Lat - Lat2` and `Lat` plus the hand-over. The full-size run below
(`N=20, M=128, R=14, C=28, K=3`, Pr=2) takes 9539 cycles. The model gives
7154 to 10290.

## XFER: sharing a tile around a ring

This is the least obvious part of the design. It lives in `xfer_loader`.

Take a tile of `n_beats` beats shared by the `p` FPGAs of a ring.

1. It is cut into `p` parts of `ceil(n_beats/p)` beats. The FPGA at ring
   position `pos` reads only part `pos` from its memory stream.
2. Every beat read from memory is written into the node's own buffer
   (write port 0). It is also sent to the next FPGA of the ring, with hop
   count 0.
3. Every beat arriving from the previous FPGA is written into the buffer
   (write port 1). Its beat index says where.
4. If the arriving beat has not yet travelled `p-1` links, it is forwarded
   to the next FPGA with its hop count plus one.
5. The loader reports `done` when all `n_beats` beats are stored.

With `p = 2` this is a plain exchange: each FPGA loads half and receives
half. With `p > 2` the parts circulate. Each link then carries
`(p-1)/p` of the tile while each memory bus carries `1/p`. With `p = 1`
the loader is an ordinary stream loader, and the node is a single-FPGA
accelerator.

The nodes of a ring are not in lockstep: each has its own memory, and
they start at slightly different times. A neighbour may therefore finish
tile `t`, start tile `t+1`, and send beats of `t+1` while this node still
waits for the last beats of `t`. Every link beat therefore carries a
one-bit **tile tag**, the parity of the execution index.

- A beat whose tag differs from the tile being loaded is held in the link
  FIFO (`rx_ready` low) until this node starts the next tile.
- Because every tile needs every part, a neighbour can never get more than
  one tile ahead. One bit of tag is therefore enough.
- The link FIFO and the neighbour's back-pressure absorb the difference.

The outgoing link gives forwarded beats priority over local ones. A local
beat is taken from memory only in a cycle in which it can also be sent, so
no local storage is needed besides the buffer itself.

### Link beat format

A link beat is `{link_hdr_t, data}`, with the header in the most
significant bits:

| Field | Bits | Meaning |
|---|---|---|
| `tag` | 1 | parity of the tile |
| `hops` | 4 | links already travelled, minus one |
| `beat` | 16 | beat index inside the tile |
| data | `IP*16` (row link) or `WP*16` (column link) | the words of the beat, word 0 in the low bits |

So the row link is 85 bits wide and the column link 149 bits at the
defaults. The links use valid/ready in `link_clk`.

## Configuring a node

`superlip_node` takes a `layer_cfg_t` (in `slp_pkg`), latched on `start`:

| Field | Meaning |
|---|---|
| `k`, `stride` | kernel size and stride |
| `n_outer` | this node's batch x row-tile x column-tile count |
| `n_m`, `n_n` | output- and input-channel tile counts |
| `frac` | output right shift (fixed-point position) |
| `p_row`, `row_pos` | row ring size and this node's position in it |
| `p_col`, `col_pos` | column ring size and this node's position in it |

The host, or its DMA, must supply data in this order:

- **IFM stream.** One tile per execution, in execution order: outer tile,
  then `m` tile, then `n` tile. So the IFM tile is re-sent for every output
  channel tile. Inside a tile, word `w` is channel `w mod Tn` of input pixel
  `w div Tn`, row-major over the `Trin x Tcin` window. With XFER the node
  sends only beats `[pos*L, min((pos+1)*L, n_beats))` of each tile, where
  `L = ceil(n_beats/p_row)`.
- **Weight stream.** Same execution order. Word `w` is kernel position
  `w div (Tm*Tn)` (row-major), output channel `(w mod Tm*Tn) div Tn` and
  input channel `w mod Tn`. The node's part is selected the same way, with
  `p_col`.
- **OFM stream.** One `Tm x Tr x Tc` tile per output group. Pixels are
  row-major; within a pixel the channels go in `OP`-word beats.

Border pixels of a layer that does not divide into whole tiles, zero
padding and row/column halos are the host's business. It sends zero words
where the tile leaves the map.

## Where this departs from the published design

- **Multiple links.** The published analysis counts `P-1` channels per FPGA
  for a group of `P`. With two links per FPGA, as in a 2D torus, this
  design passes parts around a ring instead. For `P = 2` the two are the
  same.
- **Link width.** The published link data width follows `IP` and `WP`
  (128 bits for weights). Here the links carry the same data width plus the
  21-bit header, 149 bits in all. That is still within a 256-bit
  board-to-board interface.
- **HLS.** The published accelerator was written in high-level synthesis.
  This is hand-written RTL of the same structure, so pipeline depths and
  hand-over cycles are this design's own.
- **IFM formula.** The published IFM-load formula reuses the weight-tile
  size (`Tm*Tn*K*K`). Here the IFM tile size `Tn*Trin*Tcin` is used.
- **Arithmetic.** Only the 16-bit fixed-point datapath is built. The 32-bit
  floating-point configuration (Tm=8, Tn=32, Ip=Wp=Op=2, 100 MHz) would
  need a floating-point MAC and is not provided.
- **Own choices.** The fixed-point conversion (shift and saturate), the
  link header, the tile tag and the hand-over between steps are this
  design's own. So are the buffer bank mapping and the word orders of the
  streams.
- **Parts not included:**
  - the processor system and its software;
  - the DMA engines, the DRAM and the serial-link IP with its transceivers
    (the node exposes their stream interfaces instead);
  - the timer;
  - the design-space exploration that picks the tile sizes and partition;
  - the exchange of border rows and columns between FPGAs across layers.
    It is described only in a sentence.
- **Not implemented:** pooling, activation functions and fully-connected
  layers as such. A fully-connected layer can run as a `K = 1` layer with
  a 1x1 map.

## Which networks fit

At the default parameters, the convolution layers of these networks fit:

- AlexNet: 11x11 stride 4, 5x5, 3x3.
- VGG: 3x3.
- SqueezeNet: 1x1 and 3x3, first layer 7x7 or 3x3 with stride 2.
- YOLO: 1x1 and 3x3, first layer 7x7 with stride 2.

Layer shapes come from general knowledge of these networks. The kernel
sizes are at most `KMAX = 11`, the strides at most `SMAX = 4`, and the IFM
buffer is sized for the largest window. The 16-bit configuration with
`Tm = 64, Tn = 20` is the same RTL with two parameters changed. The 32-bit
float configurations do not fit, because there is no float datapath.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_async_fifo` | order and completeness across two unrelated clocks, with back-pressure |
| `tb_input_tile_buffer`, `tb_ofm_buffer` | bank mapping, both halves, read latency |
| `tb_conv_engine` | engine against a direct convolution for several K and S, and the cycle count |
| `tb_ofm_store` | arithmetic shift and saturation, beat order, cycle count |
| `tb_xfer_loader` | three loaders in a ring; every buffer write, forwarding, tags |
| `tb_superlip_ctrl` | scheduling with behavioural units, against the latency model |
| `tb_superlip_node` | six nodes as a 2x3 torus at reduced sizes, three layers |
| `tb_superlip_full` | two nodes at the default sizes, sharing weights |

In `tb_superlip_node` every output word is compared with a direct
convolution. The testbench also counts these mechanisms, and fails if one
never happens:

- sharing on each ring, and forwarding;
- tile-tag hold-back;
- a full link FIFO;
- load/compute overlap and store/compute overlap;
- an OFM stall.

To simulate with Verilator 5, the package comes first:

```
verilator --binary --timing --assert -Itb rtl/slp_pkg.sv \
  rtl/async_fifo.sv rtl/input_tile_buffer.sv rtl/ofm_buffer.sv rtl/conv_engine.sv \
  rtl/xfer_loader.sv rtl/ofm_store.sv rtl/superlip_ctrl.sv rtl/superlip_node.sv \
  tb/tb_superlip_node.sv --top-module tb_superlip_node
./obj_dir/Vtb_superlip_node
```

The cluster testbenches share `tb/cluster_body.svh`. It holds:

- the torus wiring;
- a behavioural DMA per node, which sends only the node's part of each
  shared tile;
- the reference convolution.

To try another configuration, change the node parameters and the
`run_layer` calls in a cluster testbench.

Lint notes for `superlip_node`:

- A few `cfg` fields and the status outputs of sub-blocks stay unused at
  the top. They are kept for observation.
- The assertion's `disable iff (!rst_n)` makes Verilator report the reset
  as used both synchronously and asynchronously.
