# DCRA die: a reconfigurable tiled fabric for irregular workloads

Graph analytics, sparse matrix–vector products and histograms spend most of
their time chasing pointers into data that has no locality. DCRA does not
move that data to the cores. It cuts the program into *tasks* at every
pointer indirection and sends each task to the tile that owns the data it
will touch. A die is a 32x32 grid of identical tiles. Each tile has a small
in-order processing unit (PU), 512 KB of SRAM, a task scheduler and a
router. The network between the tiles is a folded 2D torus, which spreads
irregular traffic more evenly than a mesh. Its size is set in software at
run time: it can close inside one die or span several dies, and it can also
be opened into meshes. A second, sparser network (the *die-NoC*) jumps one
whole die per hop. When an HBM device is packaged next to the die, each
tile's SRAM can serve as a direct-mapped cache over a private 8 MB slice of
DRAM.

This repository holds synthesizable SystemVerilog for one die (`dcra_die`)
and for everything inside it except the PU, plus self-checking testbenches.
The PU's instruction set is not specified, so the tile exposes the three
ports a PU would use: task dispatch, task spawn and word load/store.
Testbenches drive those ports with a small behavioural PU
(`tb/tb_pu_model.sv`) that runs a histogram in the task style.

## 1. A task's life

A task message is `{dst_x, dst_y, type, arg0, arg1}` (`dcra_pkg::msg_t`).
`arg0` is always an index into an array that is distributed block-wise over
the tiles.

1. **Spawn.** The PU writes a task into the output queue (OQ) of its type.
   There is one OQ and one input queue (IQ) per task type; the package
   defines four types. Queue capacities can be set at run time, up to the
   hardware depth `QDEPTH` (64).
2. **Addressing.** The Task Scheduling Unit (`tsu`) drains the OQs
   round-robin. It names the owner tile as `owner = arg0 >> chunk_log2`,
   where `chunk_log2` comes from that type's entry in the per-task table.
   The owner's grid position is `x = owner mod 2^x_bits`,
   `y = owner >> x_bits`.
3. **Transport.** Routers forward the message to `(dst_x, dst_y)`
   (section 2).
4. **Queueing.** At the destination, the router's local port hands the
   message to the IQ of its type. A full IQ back-pressures the network.
5. **Dispatch.** When the PU is free, the TSU offers the head of the
   fullest IQ; ties go to the lower type. A type is skipped while any OQ
   that its table entry says it may spawn into (`spawns` mask) is full.
   This keeps a PU from blocking on its first spawn, which would otherwise
   deadlock chains of tasks. The cycles this costs are counted as
   `oq_holds`.
6. **Prefetch.** At dispatch, `prefetch_unit` asks the data cache for
   `ptr_a + arg0` and/or `ptr_b + arg0`, two array bases from the task
   table. If the task's `stream` bit is set, it also prefetches line L+1
   each time the PU touches a new line L, until `task_done`.

## 2. The reconfigurable folded torus

### Logical rings, physical fold

Along x, the tiles of a row form a ring of logical positions
0..N-1. Connecting position N-1 back to 0 on silicon would need a wire
the length of the die, so the ring is *folded*. Within a die of width TX
(half-width H = TX/2), die number d in a row of dies holds:

- physical column 2k: logical position `H*d + k`;
- physical column 2k+1: logical position `N-1 - H*d - k`.

Here N = H x (number of dies in the row). Every ring link therefore spans
two physical columns, except at the die edges, where the two ends of the
ring meet:

- **West edge** (columns 0 and 1): logical positions `H*d` and
  `N-1-H*d`. These are the ring's two ends on this die.
- **East edge** (columns TX-2 and TX-1): logical positions `H*d+H-1`
  and `N-1-H*d-(H-1)`.

The y dimension folds the same way within a die (rows 2k / 2k+1).

### Edge ports

At each edge, the pair of ring ends goes through an `edge_port_mux`. It is
controlled by one bit of the die's edge register:

- **closed** (`wrap`=1): the two ends are joined on the die, which turns the
  ring around locally;
- **open** (`wrap`=0): both ends leave the die as off-die channels. They go
  to the next die, to an I/O die, or to nothing.

The edge register is written with `cfg_tile = 16'hFFFF`. Bits 0/1/2/3 close
the tile-NoC at the west/east/south/north edge. Bits 4..7 do the same for
the die-NoC. Each edge position has four off-die channels: 0 and 1 are the
tile-NoC ends A and B, 2 and 3 the die-NoC ends A and B. Joining two dies
means connecting channel c of one die's east edge to channel c of the next
die's west edge.

Examples for a row of D dies, the layout used in `tb_dcra_die`:

| topology | first die | middle dies | last die |
|---|---|---|---|
| one torus over all dies | W closed | neither closed | E closed |
| one mesh over all dies | neither closed | neither closed | E closed |
| torus per die | W and E closed | W and E closed | W and E closed |

In the mesh row, the last die's east U-turn is an ordinary mesh link of the
folded line. Only the torus-closing link (first die, west) is left open.
Leaving every edge open instead splits the grid into separate meshes: the
first-half and the mirror-half columns. Those are the meshes that face the
I/O dies while data is loaded.

### Die-NoC

The tiles at physical columns 1 and TX-2 (and rows 1 and TY-2) also sit on
the die-NoC. Their routers are radix-9 instead of radix-5. These columns
hold logical positions that are exactly H apart, one die's worth. A
die-NoC hop therefore moves a message H positions, and its links are folded
and closed/opened at the edges just like the tile-NoC.

### Routing

Each router is given its logical `(my_x, my_y)`, the grid size, and, per
dimension, whether the tile-NoC is a torus and whether the die-NoC is used
and is a torus (`route_cfg_t`). Routing is dimension-ordered, x first:

- In a torus dimension the shorter way round is taken; in a mesh, the
  direct way.
- A radix-9 router takes a die-NoC hop when at least `DIE_HOP` positions
  remain in the travel direction. It does not do so if the die-NoC is a
  mesh and the hop would run off its end.
- Otherwise the message takes one tile-NoC hop.

Each hop shortens the remaining distance, so every message arrives.
Routers buffer two messages per input, arbitrate each output round-robin,
and move one whole message per link per cycle.

**Deadlock caveat.** There are no virtual channels. A torus ring whose
buffers all fill can deadlock. The test workloads stay clear of this
through their queue capacities, and the dispatch rule in section 1 removes
the PU-level cycle, but the network itself gives no guarantee.

### Mode switch

Reconfiguration means rewriting the routers' `ROUTE1` mode bits and the
edge registers while the network is empty. The end-to-end test runs half of
its work as a mesh, switches to a torus (tile-NoC and die-NoC) and runs the
other half.

## 3. Tile memory: scratchpad plus cache in one SRAM

The PU sees one word-addressed local space.

- **Cached segment.** Addresses in `[seg_base, seg_limit)` go through a
  direct-mapped cache of `2^lines_log2` lines of 512 bits. The line data
  sits in SRAM rows `cdata_row + i`. The tag word of line i sits in word
  `i mod 16` of row `ctag_row + i/16`; its layout is [31] valid,
  [30] dirty, [29:0] tag. So the only cost of the cache beyond the SRAM is
  the compare logic.
- **Scratchpad.** Every other address a maps directly to word `a mod 16` of
  row `a/16`. Software keeps the scratchpad data away from the rows it gave
  to the cache.

On a miss, `dcache` writes a dirty victim back, fetches the line from the
tile's DRAM slice (line number = (address - seg_base)/16), rewrites the
tag and looks up again; the repeat lookup is not counted as a hit. The PU
waits during a miss. Writes allocate. Latencies, counted from request to
response:

| access | cycles |
|---|---|
| scratchpad write | 2 |
| scratchpad read | 3 |
| cache read hit | 4 |
| cache write hit, dirty line | 3 |
| cache write hit, clean line | 4 |
| miss | DRAM round trip plus the above |

Writing `CINIT` invalidates every line. PU accesses win over prefetches.

## 4. Memory controller

`mem_ctrl` serves the 1024 tiles from 8 HBM channels:

- Tiles are split into 8 groups of 128 consecutive tiles, one group per
  channel.
- Each channel has a round-robin arbiter.
- Tile g of a group owns channel lines `g << 17 .. (g << 17) + 2^17 - 1`
  (8 MB).
- Reads are assumed to come back in order per channel. A FIFO of
  requester numbers routes each response back to its tile.
- Write-backs are posted.

The HBM device and its PHY are outside the die.

## 5. Configuration

All state is written through the die's configuration bus:
`cfg_we`, `cfg_tile` (the tile index `py*TX+px`, or all ones for the edge
register), `cfg_addr` and `cfg_data`. Reset values: every tile is a 1x1
grid, the cache is off, and every queue capacity is 12.

| addr | register | fields |
|---|---|---|
| 0x00 | ROUTE0 | `{size_y, size_x, my_y, my_x}`, 8 bits each |
| 0x01 | ROUTE1 | [0] torus_x, [1] torus_y, [2] die_en_x, [3] die_torus_x, [4] die_en_y, [5] die_torus_y, [11:8] x_bits |
| 0x02/0x03 | CSEG_B / CSEG_L | cached segment (word addresses) |
| 0x04 | CLINES | [4:0] lines_log2, [8] cache enable |
| 0x05/0x06 | CDATA / CTAG | SRAM rows of line 0 and of the first tag row |
| 0x07 | CINIT | any write invalidates the cache |
| 0x10+4t+0/1 | task t: ptr_a / ptr_b | prefetch bases |
| 0x10+4t+2 | task t: flags | [0] pf_a, [1] pf_b, [2] stream, [7:4] spawns, [20:16] chunk_log2 |
| 0x10+4t+3 | task t: caps | [7:0] IQ capacity, [15:8] OQ capacity |

## 6. Files

| file | contents |
|---|---|
| `rtl/dcra_pkg.sv` | types, message format, configuration map, statistics |
| `rtl/task_queue.sv` | FIFO with a run-time capacity (IQs, OQs, router buffers) |
| `rtl/rr_arb.sv` | round-robin arbiter that holds a grant until it is used |
| `rtl/tsu.sv` | task scheduling unit |
| `rtl/prefetch_unit.sv` | task-driven and next-line prefetch |
| `rtl/sram_bank.sv` | 512-bit-row SRAM with word write mask |
| `rtl/dcache.sv` | cache/scratchpad controller |
| `rtl/router.sv` | radix-5 / radix-9 router |
| `rtl/edge_port_mux.sv` | reconfigurable edge port |
| `rtl/tile.sv` | a tile without its PU |
| `rtl/mem_ctrl.sv` | tile-side HBM memory controller |
| `rtl/dcra_link.svh` | link macro used by the die |
| `rtl/dcra_die.sv` | top: 32x32 tiles, folded links, edge ports, memory controller |

Every block has a testbench `tb/tb_<block>.sv` that prints
`TB_RESULT checks=N failures=M`. Behavioural models:

- `tb/tb_dram_model.sv`: one HBM channel with a 50-cycle latency;
- `tb/tb_pu_model.sv`: a histogram-running PU.

## 7. Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/dcra_pkg.sv tb/tb_dcra_die.sv --top-module tb_dcra_die -o sim
obj_dir/sim
```

Replace `tb_dcra_die` by any other testbench name.

**`tb_dcra_die`: end to end.** Two 4x4-tile dies are joined into an 8x4
torus. Each tile has a behavioural PU and each channel a behavioural DRAM.
The test runs a 512-element, 256-bin histogram: half in mesh mode, half
after switching to torus mode. It checks every bin against a reference.
It counts, and fails if any never happened:

- tile-NoC and die-NoC traffic crossing between the dies;
- die-NoC hops;
- local wrap-arounds and torus-closing links;
- cache hits, misses and dirty write-backs;
- prefetch fills;
- OQ holds and spawn stalls;
- DRAM reads and writes;
- the mode switch.

**Largest simulated size.** Two dies of 4x4 tiles each (32 tiles), 16 KB
SRAM per tile and two HBM channels per die. The default die (32x32 tiles,
512 KB SRAM each, 8 channels) elaborates and lints cleanly. It was not
simulated: building a cycle-accurate model of 1024 tiles takes well over
ten minutes of C++ compilation. The die's RTL is the same at every size
(the fold, the die-NoC positions and `DIE_HOP` all follow from `TX`/`TY`),
so the small configuration uses the same generate paths as the full one.

Unit testbenches for single blocks run in seconds each. `tb_tile` runs a
histogram through one complete tile. `tb_router` compares the routes in
mesh and torus mode, on both NoCs, against a reference
model.

## 8. Where this design departs from the paper or stops short

- **No PU.** The ISA and pipeline are not specified; the tile ends at the
  PU's ports.
- **NoC width and clock.** The NoC width (32/64-bit links) and a separate
  NoC clock are not modelled. A message crosses a link in one cycle as one
  82-bit word.
- **No virtual channels** (see the deadlock caveat in section 2).
- **Register queues.** Task queues are registers of fixed depth 64 with
  run-time capacities. They are not carved out of the SRAM.
- **Choices not taken from the paper.** These are this design's own:
  - the scheduling rule (fullest IQ, OQ-full hold);
  - the block-wise data layout (power-of-two chunks and grid width);
  - the routing algorithm;
  - the tag layout and cache state machine;
  - the grouping of tiles onto HBM channels;
  - the configuration bus.
- **Die shape.** The die requires TX = TY with TX divisible by 4.
- **Memory controller scope.** It covers only the tile-facing side. The
  HBM protocol, the die-to-die PHYs and the I/O die are outside the RTL and
  meet it at plain valid/ready ports.
