# Memory-centric deep-learning system interconnect (MC-DLA) in SystemVerilog

Training a large neural network on accelerators runs out of device memory. The usual fix is
to page data out to host memory. That is slow, because host memory sits behind PCIe or behind
the CPU's own memory bandwidth. The design here moves the overflow memory somewhere else. It
places **memory-nodes**, boards full of commodity DIMMs with a small controller, *inside* the
fast accelerator-to-accelerator network. The network is cut into rings. Device-nodes
(accelerators) and memory-nodes alternate around each ring:

```
 ... D0 - M0 - D1 - M1 - D2 - M2 - ... - D7 - M7 - (back to D0)      x 3 rings
```

Each device-node has N = 6 links of B = 25 GB/s. Three of them go to the memory-node on its
left and three to the one on its right, one link per ring. A memory-node splits into two
halves (groups): one half serves its left device, the other half serves its right device. So
each device owns half of two memory-nodes, reachable at 6 x 25 = 150 GB/s, and shares them
with nobody. Collective communication between devices (the ring steps of all-reduce or
all-gather) still works: a memory-node passes device-to-device traffic straight through to
the next device on the same ring.

This RTL models that interconnect at flit level and at the default size: 8 device-nodes,
8 memory-nodes, 3 rings, 96 link directions, 100-cycle memory at 256 GB/s per memory-node,
all at a 1 GHz clock. It contains:

- the device-node copy engine behind "copy local to remote", "copy remote to local" and
  "send a ring message";
- the page-placement policies that decide which memory-node a page lives in;
- the memory-node with its protocol engine, DMA unit and memory controllers;
- the links.

The accelerator's compute array, its HBM and the DIMMs are outside the design. Each of them
appears as a port.

## Units and clock

Everything runs on one clock, taken as 1 GHz, so "GB/s" and "bytes per cycle" are the same
number. Data moves in **flits** of 32 bytes: `flit_t` holds `head`, `tail` and 256 data bits.
All addresses (`addr_t`, 42 bits) count flits, which gives a 128 TB byte space. The constants
live in `rtl/mcdla_pkg.sv`:

| constant | value | meaning |
|---|---|---|
| `N_LINKS`, `L_PER_GRP` | 6, 3 | links per node, links per group (= per side, = rings) |
| `N_DEV` | 8 | device-nodes (and memory-nodes) |
| `LINK_BPC` | 25 | link bandwidth, bytes/cycle |
| `MEM_BPC` | 128 | memory bandwidth of one memory-node group (256 GB/s per node) |
| `MEM_LAT` | 100 | memory access latency, cycles |
| `PKT_FLITS` | 8 | largest data payload of one packet |
| `PAGE_FLITS` | 128 | page = 4 KB |

Only the 25 GB/s, 256 GB/s, 100 cycles, N = 6, 8 devices and 3 rings come from the original
system description. The flit size, packet format, packet and page sizes and buffer depths
are choices made for this RTL.

## Packets

Every packet starts with a header flit. The header (`pkt_hdr_t`) sits in the low bits of the
flit and holds: kind, source node, destination node, tag, length in flits, and flit address.
Devices are nodes 0..7 and memory-node M_n is node 16+n.

| kind | direction | flits | meaning |
|---|---|---|---|
| `PK_RD_REQ` | device -> memory-node | header only | read `len` flits at `addr` |
| `PK_WR_REQ` | device -> memory-node | header + `len` data | write |
| `PK_RD_RSP` | memory-node -> device | header + `len` data | read data, in request order |
| `PK_WR_ACK` | memory-node -> device | header only | write complete |
| `PK_MSG` | device -> device | header + `len` data | ring message; `addr` is the receiver's buffer |

`make_hdr` sets `tail` on header-only packets. Packets are never interleaved on a link. Once
an output has started a packet, it finishes that packet first.

## Links (`hb_link`)

One direction of a link is a one-flit register with a valid/ready handshake on each side and
a **byte-credit counter**. Each cycle the counter gains 25 bytes. A flit may leave only when
32 bytes of credit are present, and leaving costs 32. A saturated link therefore carries
exactly 25/32 of a flit per cycle: 1000 flits take 1280 cycles. The counter is capped at one
flit plus one cycle's worth, so an idle link cannot save up a burst. `stalled` is high when a
flit is waiting only for credit. The top brings these signals out as `link_stall`. Latency
is one cycle plus any credit wait. The PHY is not modelled.

## Device-node copy engine (`dev_remote_dma`, `dev_link_port`)

A command (`copy_cmd_t`) is one of:

- `OP_L2R`: copy `len` flits from local memory at `laddr` to remote offset `roff`;
- `OP_R2L`: the reverse;
- `OP_MSG`: send `len` local flits to the neighbouring device on side `side`, landing at
  that device's local address `roff`.

The engine accepts one command at a time and pulses `done` when the command has completely
finished:

- L2R: every write has been acknowledged;
- R2L: every read's data has been written locally;
- MSG: every packet has been sent.

The command is cut into packets of at most 8 flits that never cross a 4 KB page. For each
packet, `remote_addr_map` says which side (left or right memory-node) and which node address
it goes to. The packet is then queued on the **next link of that side in round-robin order**.
Each link has a 4-deep job queue in front of a `dev_link_port`.

A `dev_link_port` drives one link:

- **Transmit.** It sends read requests as a single header and records the local destination
  address in an in-order queue. Writes and messages read local memory one flit per cycle
  through a small staging FIFO; the read port is synchronous, with one cycle of latency.
- **Receive.** Read data is written to the address at the head of the read queue. This is
  correct because the memory-node answers each link's requests in order. A message is
  written at the address in its header. Acknowledgements only count.

Local memory writes are always accepted, so a device never back-pressures a link.

Because packets go round-robin over the links of a side, a copy confined to one memory-node
runs at 3 x 25 = 75 B/cycle. A copy that alternates pages between both nodes runs at
150 B/cycle. That difference is the point of the BW_AWARE policy below.

## Page placement (`remote_addr_map`)

Each device sees one physical address space. Its own 16 GB sits at the bottom. Above it comes
its half of the left memory-node, then its half of the right memory-node, each assumed to be
640 GB (half of a 1.3 TB node). `dev_paddr` gives an access's place in this map, and
`cur_paddr` on the top shows it for the packet last issued.

Two allocation policies decide which node a remote allocation's pages go to:

- **LOCAL.** The whole allocation lives in one memory-node, `home`. Its pages are contiguous
  from that node's `base`.
- **BW_AWARE.** Pages alternate. Even page p goes to the left node at
  `base_left + (p/2)*PAGE`, odd pages go to the right node at `base_right + (p/2)*PAGE`.
  Each node therefore holds half of the allocation as a dense, page-aligned chunk, and a
  sequential copy keeps all six links busy.

In a real system this placement would be written into the device's page tables by the driver
when the memory is allocated. Here it is computed from (policy, bases, offset) in
combinational logic, with no page table. That is equivalent for allocations made under one
policy with known bases, and it is the main place where this RTL simplifies. The module also
returns `page_left`, which the copy engine uses to stop packets at page boundaries.

## Memory-node (`memory_node`, `protocol_engine`, `dma_unit`, `dma_channel`, `mem_ctrl`)

Link indices 0..2 (side 0) face the device on one side and 3..5 (side 1) the device on the
other. Link r of each side belongs to ring r. In the system, side 0 of M_n faces D_n and
side 1 faces D_(n+1). Group g of the node serves side g only. It has its own DMA unit, its
own memory controller and its own DIMM ports (`dimm_*[g*3 + p]`).

### Protocol engine: steering and forwarding

Each incoming link looks at the packet kind in the head flit and keeps that decision until
the tail:

- read and write requests go to the DMA channel of the **same** side and link;
- everything else (ring messages) is **forwarded** to link r of the **other** side, so a
  message stays on its ring and reaches the next device.

Each outgoing link therefore has two sources: its own group's DMA responses, and traffic
forwarded from the opposite link. A two-way packet arbiter with rotating priority picks
between them and holds the grant until the packet's tail.

Two event outputs show this working:

- `fwd_pkt` pulses per forwarded packet;
- `arb_conflict` is high in each cycle in which both sources wait for the same output.

This is where memory traffic and collective communication really compete for bandwidth.

### DMA unit and channels

A group's DMA unit is three `dma_channel`s, one per link. A channel:

- takes request packets;
- issues one flit access per cycle to the memory controller (writes carry data, reads
  carry none);
- sends read responses (header plus data) and write acknowledgements back in request order.

A queue of response descriptors keeps that order. Read responses are staged in a 128-flit
read buffer. A read is issued only while in-flight reads plus buffered data fit in that
buffer, so responses never overflow, even when the link is slow or busy. 128 flits is more
than the 100-cycle latency times the link rate, so a single channel streams reads at full
link speed.

### Memory controller

`mem_ctrl` serves the three channels of its group. It models the DIMMs as a **fixed latency,
fixed bandwidth** memory:

- A rotating-priority arbiter grants at most one flit per port per cycle.
- The grants share a byte-credit budget of 128 B/cycle, which is half of the node's 256 GB/s.
- A granted access goes to the DIMM port. The DIMM returns read data one cycle later.
- A per-port circular delay line of LAT-1 entries then presents the data exactly LAT = 100
  cycles after the grant.
- Writes are posted: they are complete when granted.

With 128 B/cycle against 3 x 25 B/cycle of links, memory is not the bottleneck of one group.
It becomes one if `MBPC` is lowered.

## System top (`mcdla_system`)

The top has 8 `dev_remote_dma`, 8 `memory_node` and 2 x 48 `hb_link` instances. For memory-node
M_n and its link j, the device is D_n for j < 3 and D_(n+1 mod 8) for j >= 3. The device
link is 3 + j for j < 3, and j - 3 for j >= 3. Device D_n thus reaches M_(n-1) on links 0..2
and M_n on links 3..5, and all three rings visit the nodes in the same order.

Ports:

- per-device command interfaces;
- local memory ports (`lrd_*`, `lwr_*`, six read and six write ports per device);
- per-memory-node DIMM ports;
- the event flags `fwd_pkt`, `arb_conflict`, `link_stall`, `msg_rcvd`, `side_used`.

Parameters `NDEV`, `NLINK`, `RDBUF`, `LAT`, `LBPC`, `MBPC` default to the values above.

## Timing summary

| path | cycles |
|---|---|
| link, one hop | 1 + wait for credit; 25/32 flit per cycle sustained |
| memory access | exactly 100 from grant to data |
| BW_AWARE copy of 8 KB from each of 8 devices at once (L2R) | 96 in simulation; 61 is the bandwidth floor (256 data + 32 header flits over 6 links) |
| same data back (R2L) | 190 in simulation: 100 latency + streaming |
| LOCAL copy vs BW_AWARE copy of 16 KB, one device | about 1.75x longer (269 vs 154 cycles) |

## Simulation

Testbenches are in `tb/`. Each prints `TB_RESULT checks=N failures=M` and has a watchdog.
`tb/dimm_model.sv` and `tb/local_mem_model.sv` are behavioural arrays that stand in for the
DIMMs and the device's HBM. For example, with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/mcdla_pkg.sv rtl/*.sv \
    tb/dimm_model.sv tb/local_mem_model.sv tb/tb_mcdla_system.sv \
    --top-module tb_mcdla_system -Mdir obj -o sim && ./obj/sim
```

(`rtl/mcdla_pkg.sv` first; listing it twice through the glob does no harm.)

| testbench | what it shows |
|---|---|
| `tb_hb_link` | 1000 flits in 1278-1279 cycles; data order under random back-pressure; stalls |
| `tb_mem_ctrl` | exact 100-cycle latency, data integrity, 128 and 32 B/cycle budgets |
| `tb_dma_unit` | writes with acks, 8 back-to-back reads per link, first data after ~100 cycles, overlapped reads |
| `tb_protocol_engine` | random mixed traffic on all links: routing, packet integrity, forwarding, conflicts |
| `tb_memory_node` | both groups through real links, ring forwarding in both directions, no stray flits |
| `tb_remote_addr_map` | against an independent model; 50/50 split of BW_AWARE, single node for LOCAL |
| `tb_dev_remote_dma` | one device between two memory-nodes: placement in the DIMMs, round trip, LOCAL vs BW_AWARE time, messages |
| `tb_mcdla_system` | the full-size system: all devices copy concurrently under both policies, both directions, then two ring steps in which messages are forwarded through memory-nodes while neighbours read from the same memory-nodes; counts every mechanism and checks bandwidth |

`tb_mcdla_system` runs the top with no parameter overrides. It takes well under a second.

## Departures and limits

- Page placement is computed in hardware rather than held in page tables (see above). An
  allocation must be wholly LOCAL or wholly BW_AWARE, with bases supplied in the command.
- The software layer (`cudaMallocRemote`, driver, `cudaMemcpyAsync`) is represented only by
  the command struct. The collective algorithm (which ring step sends what) is left to
  whoever issues `OP_MSG` commands. One message command crosses one memory-node to one
  neighbour.
- DIMMs are an ideal fixed-latency, fixed-bandwidth memory. There are no banks, refresh or
  DDR4 protocol, and writes are posted.
- The optional encryption and compression engine of a memory-node is not built. Nor are the
  accelerator, the host, PCIe or the chassis backplane (which only re-routes two ring links
  and has no logic).
- No error handling, flow-control credits across links, or retry. A link's back-pressure is
  the valid/ready handshake of the receiving node.
- A device engine runs one command at a time. Overlapping copies need more engines or a
  command queue.
