# A tiled manycore SoC with a trace-based debug NoC

This design is a small tiled manycore system-on-chip. Identical tiles sit on a 2x2 mesh
network-on-chip. Three tiles compute and one holds memory. A second, independent network (a
16-bit ring) observes the chip while it runs. On that ring, instruction traces, link statistics
and trigger events travel to a host PC without disturbing the main network.

The processor cores are not part of the RTL. Each core is an OpenRISC CPU in the original
system. Here its instruction bus, data bus and retired-PC trace signals are top-level ports, so
any core (or a testbench acting as one) can be attached.

## System layout

```
          debug ring (16-bit):  USB - ITM0 - ITM2 - ITM3 - STAT0..3 - XTRIG - (back to USB)

   +-----------------+      +-----------------+
   | tile 0 compute  |------| tile 1 memory   |      y = 0
   +--------R--------+      +--------R--------+
            |                        |
   +--------R--------+      +--------R--------+
   | tile 2 compute  |------| tile 3 compute  |      y = 1
   +-----------------+      +-----------------+
```

- Tile *t* sits at x = t mod 2, y = t div 2.
- Every router has a link-statistics module on the debug ring.
- Every core has an instruction-trace module (ITM).
- Debug node numbers are:
  - 0: USB interface.
  - 1-3: ITMs of tiles 0, 2 and 3.
  - 4-7: link statistics of routers 0-3.
  - 8: cross-trigger unit.
- A free-running 32-bit counter in the top supplies the common timestamp.

| Module | Role |
|---|---|
| `optimsoc_system` | top: mesh, tiles, debug ring, debug modules, timestamp |
| `lisnoc_mesh`, `lisnoc_router` | data NoC |
| `compute_tile`, `memory_tile` | tiles |
| `tile_bus`, `tile_memory`, `wt_cache`, `network_adapter` | tile contents |
| `dbg_ring`, `dbg_ring_router` | debug NoC |
| `dbg_itm`, `dbg_link_stats`, `dbg_cross_trigger`, `dbg_usb_if` | debug modules |
| `dbg_pkt_tx`, `dbg_pkt_rx`, `sync_fifo` | helpers |
| `lisnoc_pkg`, `tile_pkg`, `dbg_pkg` | shared types and constants |

## Data NoC (LISNoC)

The routers forward packets wormhole-style and buffer them at their inputs.

- **Virtual channels.** Each router has two virtual channels (VCs), each with its own 4-flit
  FIFO per input port.
  - VC0 carries message passing.
  - VC1 carries DMA traffic.
  - The VCs keep one class of message from blocking the other: a message stuck behind a DMA
    transfer cannot cause a deadlock, and neither can the reverse.
- **Flits.** A flit is 34 bits: a 2-bit type (payload, header, last, single) and 32 data bits.
- **Header word.** The header carries the destination tile in bits 31:27, a class in bits
  26:24 and the source tile in bits 23:19.
- **Routing** is XY.
- **Output allocation.**
  - Each (output, VC) pair is held by one input from the header flit to the tail flit (the
    wormhole lock).
  - Competing inputs are served round-robin.
  - The physical link is shared between the two VCs flit by flit, also round-robin. A DMA
    transfer and a message can therefore interleave on one link.
- **Handshake.** Each link has one valid/ready pair per VC, and a flit moves when both are
  high.
- **Link statistics.** `link_act` reports every flit that leaves a port.

## Inside a tile

### Compute tile

A compute tile has these parts on a shared bus (`tile_bus`):

- the core ports, each through an instruction cache and a data cache;
- a local memory of 32 KiB;
- the network adapter, which has one slave port and two DMA master ports.

How the bus works:

- A master holds `req` until it sees a one-cycle `ack`.
- Masters are granted round-robin.
- Addresses with top nibble 0 go to memory, and top nibble E goes to the network adapter.
- The bus shows every write to the caches as a snoop.

### Caches

The caches are direct mapped with 64 one-word lines.

- They are write-through and do not allocate on a write. This keeps the locally shared
  memory coherent in a simple way.
- When another master writes an address, any copy of it is invalidated.
- A hit answers in one cycle.
- Only the memory region is cached.

### Network adapter

The adapter's registers sit at 0xE000_0000 onwards.

**Message passing**

- Software writes the header word and then the payload words to `MP_TX`. The last word goes
  to `MP_TX_LAST`.
- A write stalls while the 16-entry send FIFO is full.
- Received words wait in a 16-entry FIFO.
  - `MP_RX_CNT` gives its fill level.
  - `MP_RX_DATA` pops one word.
  - `MP_STATUS` reports whether a word is waiting and whether the last word read ended a
    packet.
- `irq` is high while a word waits.
- When the receive FIFO is full, the rest of a message waits in the routers. The network then
  applies back-pressure up to the sender.

**DMA**

The DMA engine only pushes data from the local tile to another tile.

1. Software sets the local address, remote tile, remote address and length, then starts the
   transfer in `DMA_CTRL`.
2. The engine reads the words over the bus and sends them as one VC1 packet: header, address,
   data.
3. The target adapter writes them into its own memory through its own bus master.
4. `DMA_CTRL` bit 0 reads as busy until the last word has been sent.

### Memory tile

The memory tile has the same memory and adapter but no cores. Other tiles reach it by DMA. A
local bus port (`ext_req`) lets a host load or inspect it.

## Debug NoC

The ring is 16 bits wide and carries packets. Each flit has a `last` flag.

Packet format:

| Word | Content |
|---|---|
| 0 | `{dest[7:0], src[7:0]}` |
| 1 | `{type[3:0], arg[11:0]}` |
| 2 and up | payload |

Packet types:

- CONFIG writes register `arg` of a module with the payload word.
- TRIGGER carries start (bit 0) or stop (bit 1).
- EVENT reports a trigger condition to the cross-trigger unit.
- TRACE and STATS carry the data.

### Ring router (the hard part)

A ring of wormhole routers can deadlock: every ring FIFO fills with a partial packet, and each
one waits on the next. The ring router avoids this with two rules:

1. **Whole packets only.** A module's packet enters the ring only when it sits completely in the
   router's 16-flit local FIFO.
2. **Keep a bubble.** A packet enters only when the next router's ring FIFO has more free slots
   than the packet is long, so at least one slot stays free after it.

Packets already on the ring have priority over new ones. Because at least one slot always stays
free, traffic already on the ring can always move on. Packets must therefore be at most 15 flits
long. The longest packet in this design is the 9-word statistics packet.

### Instruction trace module (`dbg_itm`)

- **Input.** The module watches the retired PCs of one core.
- **Starting and stopping.** Tracing is switched on in one of three ways:
  - directly by the host;
  - by retiring a start PC, and off again at a stop PC, once armed;
  - by TRIGGER packets.
- **Events.** A PC trigger also sends an EVENT packet to the cross-trigger unit.
- **Compression.**
  - An instruction at last PC + 4 only increments a counter.
  - Any other instruction (a jump, or the first after a start) makes a message: the timestamp,
    the number of sequential instructions since the last message, and the new PC.
  - Each message becomes a 7-word TRACE packet.
- **Overflow.**
  - Messages wait in a 4-entry queue.
  - When the queue is full, messages are dropped and counted.
  - The count is sent in the next packet, so the host knows where the trace has gaps.

### Link statistics (`dbg_link_stats`)

- The module counts the flits that leave each router port over a window (CONFIG register 0
  sets the length in cycles).
- At the end of each window it sends the counts with a timestamp.
- A window that ends while the previous packet is still being sent is dropped and counted.

### Cross trigger (`dbg_cross_trigger`)

- The unit remembers which source nodes have reported start or stop events.
- It fires when any selected source (OR mode) or all selected sources (AND mode) have
  reported.
- It then sends a TRIGGER packet to every node in its destination mask.

### USB interface (`dbg_usb_if`)

The interface bridges the ring to a 16-bit word FIFO, such as the slave FIFO of an EZ-USB chip.

- The stream has no packet marker, so each packet is preceded by a length word in both
  directions.
- A length of 0 from the host is ignored.

## What follows the source design and what does not

**Taken from the design description:**

- a packet-switched, wormhole, buffered mesh NoC with virtual channels;
- compute tiles with cores on a locally shared memory, kept coherent by write-through snooping;
- a network adapter for message passing and DMA;
- the 2x2 arrangement with one memory tile;
- a separate 16-bit buffered ring for debug;
- instruction traces and router link statistics;
- start/stop triggers that can be combined across modules;
- timestamps on all debug data;
- compression of instruction traces only;
- USB 2.0 as the off-chip link.

**This design's own choices** (none of them is specified there):

- flit and header formats, buffer depths and arbitration;
- bus protocol, address map and cache organisation;
- the adapter's register map and push-only DMA;
- the debug packet format and the ring's bubble rule;
- the compression scheme;
- window-based statistics;
- OR/AND cross-triggering;
- the USB framing.

**Not included:**

- the CPU cores;
- memory data tracing (not part of the original system either);
- the debug controller (named, but not described);
- the host software;
- the USB chip.

**Known simplifications:**

- Byte writes are not supported: all accesses are 32-bit words.
- The DMA engine can only write to a remote tile, not read from one.

## Simulation

Each block has a self-checking testbench in `tb/` named `<module>_tb.sv`. The cross-trigger,
link-statistics and USB testbenches follow that pattern. The ring router is exercised inside
`dbg_ring_tb`.

Each testbench prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl rtl/*pkg.sv rtl/*.sv tb/optimsoc_system_tb.sv \
          --top-module optimsoc_system_tb && obj_dir/Voptimsoc_system_tb
```

Packages must come first on the command line.

### End-to-end test

`optimsoc_system_tb` runs the top at its default parameters. Testbench processes act as the
cores and the host.

The host side:

- configures tracing with PC triggers on core 0;
- sets up cross-triggering to cores 2 and 3;
- enables statistics windows of 256 cycles.

The tiles:

- Tile 0 runs a loop, makes a DMA transfer to the memory tile, and sends tile 3 a 25-word
  message. The message is longer than tile 3's receive buffer.
- Tile 2 DMAs into tile 0's memory over a line that tile 0 has cached.
- Tile 3 produces more trace than the ring can carry.

What it checks:

- all data, including the exact compressed trace against an independent model;
- that each mechanism happened at least once:
  - VC interleaving on a link;
  - NoC back-pressure;
  - cache hits;
  - snoop invalidation;
  - trace overflow;
  - cross-trigger firing;
  - statistics windows.
