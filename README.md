# SpiNNaker2 processing-element fabric in SystemVerilog

SpiNNaker2 is a many-core chip built for two kinds of work at once. One is
event-based neural simulation: a very large number of tiny spike messages
must reach many cores at once. The other is deep-network inference: dense 8-bit
matrix arithmetic. The chip puts 152 small processing elements (PEs) on one
die. Each PE has a processor, 128 kB of local SRAM and a small 4x16
multiply-accumulate (MAC) array. The PEs are grouped four at a time into
quad-PE tiles (QPEs), and the tiles are joined by a 2-D network-on-chip.
A dedicated SpiNNaker router sits on that network. It looks up spike keys in
a table and fans each spike out to many PEs and to other chips.

Energy is saved in two ways:

- Every PE runs in its own clock domain (GALS: globally asynchronous,
  locally synchronous).
- Every PE scales its supply voltage and clock at the start of each
  simulation time step. The level is chosen from how many spikes are
  waiting for it.

This RTL covers the digital fabric of that chip:

- the network routers;
- the QPE tile;
- the PE without its processor core: SRAM, MAC accelerator, DMA, timer,
  random number generator, performance-level controller, spike queues;
- the SpiNNaker router;
- the chip-level mesh.

The processor core (an Arm Cortex-M4F) is licensed IP and is not included.
Each PE brings its core's data bus out as a port, so a core model, or a
testbench acting as the core, drives the PE through its memory map.

## Chip floorplan and the mesh

`spinnaker2_chip` is a grid of NQX x NQY tiles (default 7 x 6). Tile (tx,ty)
has network coordinates (tx+1, ty+1). Column/row 0 and the outer ring belong
to the off-tile parts: memory controllers, serial links, host interface and
periphery. Those parts are not in this RTL, so the mesh links leaving the
grid are chip ports.

Four of the 42 tiles are router-only tiles with no PEs (set by `HOLES`):

- (4,3) and (4,4), where the SpiNNaker router sits;
- (7,3) and (7,4), where a serial link sits.

That leaves 38 QPEs, or 152 PEs. The PE index is `4*tile + p` everywhere:
processor buses, interrupts and the router's local route bits. The PE slots
of hole tiles exist as ports but are inert.

The SpiNNaker router is attached to PE port 0 of its tile (`SPR_TILE`). It
therefore sends and receives ordinary network packets, like a PE would.

Clocks:

- `ref_clk` drives the configuration network.
- `noc_clk[t]` drives the router logic of tile t.
- `pe_clk[n]` drives PE n.

Nothing assumes any relation between these clocks.

## Network-on-chip

There are two meshes. They share one packet format.

### Packet format (`spinn2_pkg`)

A data packet is 192 bits and travels as a single flit:

| field | bits | meaning |
|---|---|---|
| NoC header | 15 | size 3, dx 3, dy 3, R 1, PE mask 4, C 1 |
| packet header | 17 | bit 16 marks a carried SpiNNaker packet |
| address | 32 | target address in the destination PE |
| payload | 128 | 0 to 4 words, as given by `size` |

- `dx/dy` is the destination tile.
- The 4-bit PE mask selects the destination PEs of that tile. Several bits
  set means one packet is delivered to several PEs (multicast inside the
  tile).
- `R` addresses the tile's register file.
- `C` asks for the packet to travel over the configuration network.

The order of the header fields is this design's choice. The overall widths
follow the original design.

### Data NoC router (`dnoc_router`)

The router has nine ports: N, E, S, W, PE0-PE3, and CN (the bridge to the
configuration network). Each input passes through these stages in order:

1. An asynchronous FIFO (`async_fifo`, Gray-coded pointers) that moves the
   packet into the router clock.
2. Dimension-order routing: X first, then Y (Y grows northwards).
3. A two-entry FIFO that cuts the critical path.
4. Per output, a round-robin port control. It grants one input and steers
   the crossbar into a two-entry output FIFO.

Hop latency is 5 cycles: 3 in the synchroniser FIFO, 1 in the middle FIFO
and 1 in the output FIFO. The testbench checks this number.

Routing at the destination tile:

- A multicast packet waits at its input until every selected output has
  taken a copy. Outputs that are free take their copy at once.
- `R` packets go to CN.
- A packet for the local tile with neither `R` nor a PE bit has nowhere to
  go. It is dropped and counted.

### Configuration NoC (`cnoc_router`, `noc_ser`, `noc_des`, `qpe_regfile`)

The configuration network is 32 bits wide with wormhole switching. A `last`
side bit ends each packet. It runs on the reference clock, so the chip can
be booted and configured before any PLL is running.

The router has six ports: N, E, S, W, register file (RF) and the data-NoC
bridge (DN). It routes on the head flit, X first. A wormhole stays locked to
its output until the `last` flit passes.

At the bridge, a 192-bit packet is cut into:

1. a header word;
2. an address word;
3. only the payload words it carries.

The cut is made by `noc_ser`, and `noc_des` rebuilds the packet. Any packet can
therefore cross between the two meshes in either direction:

- a data-NoC packet with `C=1` continues over the configuration network;
- a configuration packet for a PE is rebuilt and handed to the data NoC.

`qpe_regfile` holds 16 words. Payload word k of a packet is written to
register `addr/4 + k`. The registers are brought out as the tile's `cfg`
port, because their meaning is not defined here.

## QPE tile (`qpe`, `qpe_xbar`)

A tile holds:

- four PEs;
- the two routers;
- the register file;
- the SRAM-sharing crossbar;
- every clock-domain crossing of the tile.

PE packets enter the router through its asynchronous input FIFOs. Packets
to a PE leave through another asynchronous FIFO into that PE's clock. Each
mesh output is exported with the tile's router clock (`noc_clk_out`), so the
neighbour can synchronise it.

`qpe_xbar` lets a PE's core read and write the SRAM of its neighbours. The
address is `0x1?_?...`, with address bits 21:20 selecting the PE. The links
are PE0-PE1, PE0-PE2, PE1-PE3 and PE2-PE3. A request to a PE that is not a
neighbour (itself or the diagonal one) is granted and dropped, and reads of
it return zero.

The crossbar is clocked by `pe_clk[0]`, so in this RTL sharing is exact only
when the PEs of a tile run on one clock. How the original chip crosses the
DVFS clocks on this path is not known, and this is the main open
simplification inside the tile.

## Processing element (`pe`)

Memory map of the core bus, by `addr[31:28]`:

| region | use |
|---|---|
| 0x0 | local SRAM, 128 kB |
| 0x1 | neighbour SRAM through the crossbar |
| 0xE | peripherals, selected by `addr[11:8]` |

Peripherals by `addr[11:8]`: 0 MAC, 1 timer, 2 PRNG, 3 DMA, 4 DVFS, 5 spike
unit.

The same peripheral registers can be written by NoC packets whose address
starts with 0xE. This is how a remote PE or the host starts the MAC
accelerator without involving the core.

### SRAM (`pe_memory`, `sram_bank`)

The 128 kB are four contiguous 32 kB banks of 2048 x 128 bits with byte
strobes. Five masters compete, and each bank has its own round-robin
arbiter:

- core;
- MAC accelerator;
- NoC inbound;
- DMA;
- neighbour PEs.

Masters that use different banks proceed in the same cycle. So the MAC
array can stream operands from one bank while the core works in another.

### MAC accelerator (`mac_accel`, `mac_array`)

The array is 4 rows x 16 columns of 8-bit unsigned multipliers with 29-bit
accumulators, so it does 64 MACs per cycle. Operands reach it from two
sides:

- Operand B (feature map or matrix) comes from the local SRAM, one 128-bit
  line per cycle.
- Operand A (weights) is streamed over the NoC into a 16-entry queue, one
  32-bit word (4 bytes, one per row) per step.

**MM mode.** For k = 0..K-1, row i gets `a_i(k)` and column j gets byte j
of SRAM line `B_ADDR+16k`. The result is a 4x16 block of C = A*B.

**CONV mode.** A 16-byte shift register is loaded from SRAM. Tap k
multiplies column j by pixel `x[j+k]`. One new pixel shifts in per tap, so
one SRAM line lasts 16 taps. The result is a 1-D correlation: 4 output
channels x 16 output pixels. A 2-D convolution is a sequence of such runs,
one per kernel row, that software combines.

When a run is done, the 64 results are written back as 32-bit words at
`OUT_ADDR + 4*(16*i + j)`, four per cycle. Then `irq[0]` pulses.

With data waiting and no bank conflicts, an MM run of K steps raises its
interrupt K + 20 clock edges after the start write. `CYCLES` reports the
length of the last run.

Registers:

| offset | name | meaning |
|---|---|---|
| 0x00 | CTRL | start, conv |
| 0x04 | K | number of steps, 16 bits |
| 0x08 | B_ADDR | address of operand B |
| 0x0C | OUT_ADDR | address of the results |
| 0x10 | STATUS | busy, done |
| 0x14 | CYCLES | length of the last run |

### Spikes, DMA, timer, PRNG

- **Spike unit.** A write to offset 0x00 sends a SpiNNaker packet with
  that key to the target set in 0x0C, normally the SpiNNaker router.
  Received spike keys queue in a 128-entry FIFO. The core pops them at
  offset 0x04 and reads the queue fill level at offset 0x08.
- **DMA (`pe_dma`).** Copies N local SRAM lines to a remote PE address,
  one network packet per 16-byte line. The target address is in the DST
  register: tile x/y, PE mask and address.
- **Timer (`pe_timer`).** A reloading down-counter. Its tick starts a
  simulation time step.
- **PRNG (`prng`).** A 32-bit xorshift generator.

### Performance levels (`dvfs_ctrl`)

At each timer tick the PE wakes up. The controller looks at the number of
spikes in the FIFO and picks a level:

| spikes waiting | level |
|---|---|
| more than LTH2 (default 59) | PL3 |
| more than LTH1 (default 17) | PL2 |
| otherwise | PL1 |

When the software writes CTRL.done, the PE drops to PL1 and sleeps until
the next tick. The `pl` output would select the supply rail and clock
source. The rail switches and clock generators are not included.

Cycle counters per level give the time spent at each level. This is the
quantity an energy model of the time step needs.

The three levels are those of the test chip: 0.5 V/100 MHz, 0.5 V/200 MHz
and 0.6 V/400 MHz. The original description also mentions a two-rail, two-level scheme.
This design follows the three-level one. The default thresholds are those
of a synfire-chain benchmark.

## SpiNNaker router (`sp_router`, `sp_noc_bridge`)

### Packets

A SpiNNaker packet (`sp_pkt_t`) has three parts:

- an 8-bit control byte, whose type field is in bits 7:6 (00 multicast,
  01 core-to-core, 10 nearest-neighbour);
- a 32-bit key;
- an optional payload.

### Pipeline

The router has six chip-to-chip link inputs and one local input. A
round-robin arbiter merges them into one pipeline with three stages:

1. input register;
2. routing;
3. output stage.

A packet can leave two cycles after it enters.

### Routing by packet type

- **Multicast.** The key is matched against a ternary table of 1024
  `{key, mask, route}` entries. An entry matches when
  `((key ^ e.key) & e.mask) == 0`, and the lowest matching index wins. The
  route has one bit per link and one per PE.
  - On a miss, a packet from link i continues straight on, to link
    (i+3) mod 6 (default routing).
  - A local packet that misses is dropped.
- **Core-to-core.** `key[31:16]` is the destination chip and `key[15:8]`
  the PE. If the chip is this one, the packet goes to that PE. Otherwise it
  goes X first towards the chip: link 0 = E, 3 = W, 2 = N, 5 = S.
- **Nearest-neighbour.**
  - From a link, the packet goes to the monitor PE, PE 0.
  - From local, it goes to link `ctrl[4:2]`. Value 7 means all links and
    6 means drop.

### Output stage

The output stage sends every copy. Copies to PEs leave one per cycle. If
copies are still blocked 64 cycles (`DROP_WAIT`) after the packet arrived,
they are dropped and counted.

### Bridge to the mesh

`sp_noc_bridge` sits between the router and the mesh:

- It packs outgoing copies for PEs into network packets: destination tile
  and PE from the PE index, packet-header bit 16 set.
- It unpacks spike packets arriving from PEs.

The table is written through the `tbl_*` port.

Not included:

- ECC on the table memories;
- built-in self-test of the ternary table;
- clock gating;
- the out-of-order issue buffer of the original router.

For lack of detail, the table size, the default-routing rule and the drop
wait are this design's choices.

## What is not here

These parts have their signals brought out as ports, or are simply absent:

- the Arm core;
- the true random number generator;
- the exponential/logarithm accelerator;
- body-bias generators, PLLs and power switches;
- LPDDR4 controllers and PHYs;
- serial links;
- host and periphery interfaces.

The processor buses are simple request/grant buses with 32-bit data, not
AHB.

## Sizes and how far it has been run

Every parameter default is the full chip:

- 7 x 6 tiles, 38 QPEs / 152 PEs;
- 128 kB SRAM per PE;
- 1024 router table entries;
- 6 chip links.

The measured test chip had two QPEs. The chip-level testbench uses a 3 x 1
mesh with one hole tile (two QPEs, like that test chip), 1 kB banks and 16
table entries. It makes each of these mechanisms happen and counts it:

- DMA across tiles;
- crossbar sharing;
- multicast routing;
- default routing;
- dropping;
- nearest-neighbour packets;
- core-to-core packets;
- MAC with operands from the NoC;
- PE multicast;
- register-file writes;
- crossings between the two meshes in both directions;
- a DVFS level change.

`tb_spinnaker2_chip_full` builds the chip at full size and runs one
complete operation:

1. A DMA from PE 0 at (1,1) to PE 165 at (7,6).
2. A spike from PE 165 through the SpiNNaker router, using table entry
   1000, to PE 0 and to link 0.

It passes, and simulating it takes about a second. Compiling the full chip
into a simulator is the slow part: several minutes of C++ compilation, so
use `-j` when building.

## Simulating

Every block has a self-checking testbench `tb/tb_<module>.sv`. It prints
`TB_RESULT checks=N failures=M` and stops itself if it hangs. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/spinn2_pkg.sv \
          tb/tb_dnoc_router.sv --top-module tb_dnoc_router -o sim
./obj_dir/sim
```

The other files are found through `-Irtl` (module name = file name). Pass
`+verilator+rand+reset+2` to start every register that is not reset at a
random value.

The testbenches override parameters only to keep runs short. To change the
chip, change the top's parameters:

- `NQX`, `NQY`, `HOLES` and `SPR_TILE` set the floorplan.
- `BANK_WORDS` sets the SRAM size.
- `MC_ENTRIES` sets the router table size.

## Departures and open points

- The SRAM sharing crossbar uses a single clock: PE 0's (see above).
- CONV is 1-D per run. The 2-D loop is software.
- The register maps, the field order of the network header and all FIFO
  depths are this design's choices.
- The reset is one asynchronous signal for all domains. It is assumed to be
  released synchronously in each of them.
- The network can carry any address-mapped write. Dedicated interrupt
  packets and scan-test data streams over the network are not built. Nor
  are the few direct interrupt lines between neighbouring tiles.
- The core's three buses (two to memory, one to the peripherals) are
  merged into one request/grant port per PE.
- Lint notes that stay are explained in the header of the file that causes
  them.
