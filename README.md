# FPGA network fabric of a 3D-mesh neural computer

This RTL is the communication logic for a machine made of hundreds of small
compute nodes. Each node is a Zynq system-on-chip: an ARM processor, its own
1 GB of DRAM, and FPGA fabric. The nodes sit in a 3D mesh. A card carries 27
nodes as a 3x3x3 cube. Sixteen cards on a backplane form a 12x12x3 system of
432 nodes.

The processors never touch the links between nodes. Every link is driven by
the FPGA fabric, so the network logic itself can be reconfigured. This
repository holds one version of that logic:

- per-link credit flow control;
- a 13-port router with adaptive minimum-hop routing and broadcast;
- four message protocols that share the network (internal Ethernet,
  Postmaster DMA, Bridge FIFO and NetTunnel);
- the card-wide Ring Bus side channel.

All of it is synthesizable SystemVerilog. The two tops are `inc_node` (one
node's fabric) and `inc_card` (27 nodes wired as a card).

Not modelled:

- the processor, DRAM, PCIe, the external-Ethernet gateway node, JTAG and the
  serial transceivers. The design meets them at plain ports: a memory bus per
  node, a register port per node, host command ports on node 000, and one
  parallel word per cycle per link direction.
- absolute latency. The design has no real SERDES, so the microsecond figures
  of the real machine cannot be reproduced; only the cycle counts of the
  logic itself can be measured (see "Latency").

## Coordinates, ports and packets

A node is named by its position `coord_t {x, y, z}`, 5 bits per axis. On a
card, local position (lx, ly, lz) is node index `9*lx + 3*ly + lz`, and that
index is also the node's Ring Bus station number.

Every node has 13 router ports:

| port | link |
|---|---|
| 0 | local (the node's own protocol units) |
| 1..6 | single-span +X, -X, +Y, -Y, +Z, -Z (to the nearest neighbour) |
| 7..12 | multi-span +X, -X, +Y, -Y, +Z, -Z (to the node three places away) |

Multi-span links always join two different cards. The system size
(`SYS_X/Y/Z`, default 12x12x3) tells each router which of its links exist.
Links at the edges of the system are never used.

A packet is a header flit followed by `len` payload flits. A flit is 64 data
bits plus a `last` bit. The header (`pkt_hdr_t`), from the least significant
bit:

| bits | field |
|---|---|
| 14:0 | dst (x, y, z) |
| 29:15 | src |
| 30 | bcast |
| 32:31 | proto (0 Ethernet, 1 Postmaster, 2 NetTunnel, 3 Bridge FIFO) |
| 37:33 | chan (Bridge FIFO channel) |
| 45:38 | len |
| 63:46 | free for the protocol (NetTunnel puts its opcode here) |

## Links and credits (`link_port`)

A real link is two one-way serial lines with no handshake wires. Here each
direction carries one `link_word_t` per cycle. The word is either a data flit
or a credit grant: `is_credit` set, and `data[15:0]` holds a number of bytes.

Credit flow:

- The receiving end owns a `BUF_FLITS` = 16 flit buffer (128 bytes).
- After reset it owes the far transmitter the whole buffer, and the first
  grant says so.
- Each time the router drains a flit, 8 more bytes are owed. The grant is
  returned on the paired outgoing direction.
- The transmitter subtracts 8 bytes per flit and stops at zero.
- A grant takes the outgoing slot in preference to data when either:
  - no flit was sent in the previous cycle;
  - the transmitter holds no credit;
  - half the buffer is owed.

So the receive buffer can never overrun, and an assertion in `link_port`
checks this. At one flit per cycle, a link carries 1 GB/s per direction
(the paper's link rate) at a 125 MHz fabric clock. Credit words take a share
of that slot.

## Router (`packet_router`)

The router uses wormhole switching. A header flit claims its output ports,
the payload follows, and the `last` flit releases the ports. Inputs are served
in rotating priority, starting one place after the last winner. An input that
finds no free output waits with its header at the head of its buffer.

**Directed packets.** For each axis, let `d = dst - here`.

- If `|d| >= 3`, the multi-span link toward the destination is productive.
- If `|d|` is 1 or 2, the single-span link is.
- Every productive link lies on a minimum-hop path. The router takes the
  lowest-numbered productive output that is free in that cycle.
- So two packets between the same nodes may take different paths and arrive
  out of order. The paper allows this.
- If the first productive choice is taken and another is used, the router
  pulses `ev_detour`.
- A packet with `d = 0` on every axis goes to the local port.

**Broadcast packets** use single-span links only. The forwarding rule depends
on the port the packet came in on:

| came in on | forwarded to |
|---|---|
| local | all six single-span links |
| an X link | straight on in X, both Y links, both Z links, local |
| a Y link | straight on in Y, both Z links, local |
| a Z link | straight on in Z, local |

The broadcast first fans out along the X line through the source. Each X node
then fans out along Y, and each Y node along Z. Every other node therefore
gets exactly one copy, and the copy never returns to the source. Ports whose
links are absent are dropped from the set.

A broadcast claims all of its outputs at once and moves through them in
lockstep. The router pulses `ev_bcast` when it switches a broadcast, and
`ev_multi` when it uses a multi-span link.

**Deadlock.** The paper does not say how deadlock is avoided, and this
router has no virtual channels. Two limits follow:

- Adaptive wormhole routing without them can deadlock under heavy cyclic load.
- So can a lockstep broadcast that meets opposing traffic.

The tests run many crossing streams across two cards without deadlock, but
this is not a proof. Anyone who needs guaranteed progress should add virtual
channels or restrict the adaptive choice (for example, to dimension order).

## Protocol units on a node (`inc_node`)

`packet_mux` merges the four protocol streams into the router's local input.
It works at packet boundaries in round robin and writes the protocol number
into the header. `packet_demux` steers packets from the router's local output
to a receiver by the `proto` field.

The four FPGA masters share the node's memory through `bus_arbiter`: Ring
Bus, NetTunnel, Postmaster and Ethernet. The arbiter uses rotating priority
and has one access in flight. The memory bus (`bus_req_t`/`bus_rsp_t`) holds
`req` until `ack`; read data comes with `ack`.

The processor register port decodes addresses as follows:

| address | unit |
|---|---|
| 0x000-0x0FF | Postmaster |
| 0x100-0x1FF | internal Ethernet |

### Bridge FIFO (`bridge_fifo_tx`, `bridge_fifo_rx`, `bridge_fifo_mux`, `bridge_fifo_demux`)

The Bridge FIFO is a FIFO whose write port is on one node and whose read port
is on another. User logic sees plain `wr_en/wr_data/full` and
`rd_en/rd_data/empty` ports. Words are 7 to 64 bits wide (`WIDTH`).

The transmit half buffers up to 16 words and closes a packet in either case:

- when `MAX_WORDS` = 8 words are waiting;
- when at least one word is waiting and no word was written in the previous
  cycle.

A steady stream therefore travels in full packets, and a lone word leaves at
once.

The receive half strips the header and keeps a 32-word FIFO. When that FIFO is
full it stops taking flits, and the back-pressure reaches the sender through
the router and the link credits. Nothing is dropped.

Several channels share a node through `bridge_fifo_mux` and
`bridge_fifo_demux`, which stamp and steer the 5-bit `chan` field (up to 32
channels). `inc_node` builds `BRIDGE_CH` = 2 channels. Channel c on one node
talks to channel c on the node given by `bf_dst[c]`.

### Postmaster (`postmaster`)

Postmaster is a remote queue for many small messages.

Sending:

1. Software (or logic) writes the target node to DEST (0x00).
2. It writes words to QUEUE (0x08).
3. It writes SEND (0x10) to close the message. A message also closes by
   itself at `MAX_WORDS` = 16 words.

Closed messages wait in a four-entry job queue. `csr_ready` goes low while the
word or job queue is full.

Receiving: the receiver stores each arriving packet, header flit included,
into a circular buffer given by BASE (0x18) and SIZE (0x20). Packets are
stored in arrival order, one after another. WPTR (0x28) is the next free byte
offset, and RXCNT (0x30) counts the packets.

A packet is collected whole before it is written, so packets from different
senders never interleave inside one packet. If a packet would run past the
end of the buffer, it starts again at BASE. A packet is therefore always
contiguous. Software is expected to consume the buffer before it wraps; no
read pointer is kept.

### Internal Ethernet (`eth_dma`)

This unit is a DMA device with buffer descriptors, the kind an Ethernet driver
expects. There are four transmit and four receive descriptors.

Transmit descriptor i:

| register | address | contents |
|---|---|---|
| TXA | 0x00 + 16i | buffer address |
| TXC | 0x08 + 16i | bit 63 OWN, bits 46:32 destination node, bits 7:0 length in 64-bit words |

Receive descriptor i:

| register | address | contents |
|---|---|---|
| RXA | 0x40 + 16i | buffer address |
| RXC | 0x48 + 16i | bit 63 OWN (buffer free), bit 62 DONE, bits 46:32 source node, bits 7:0 length |

Other registers: IE at 0x80 bit 0 enables the interrupt; a write to 0x88
clears the pending interrupt.

Transmit: the hardware serves descriptors in ring order. For each one it
reads the frame from memory, sends it, and clears OWN.

Receive: an arriving frame goes into the next free buffer. The descriptor
then gets DONE, the length and the source node, and `irq` is raised if
enabled. A driver may poll DONE instead of using the interrupt. A frame that
finds no free buffer is dropped, as real Ethernet would drop it.

The driver supplies the destination node; mapping IP addresses to nodes is
left to software.

### NetTunnel (`nettunnel`)

NetTunnel gives a host command port read, write and broadcast-write access to
any node's 32-bit address space, over the packet network.

The initiator side:

- takes one command at a time (`cmd_*`);
- sends a request packet carrying the address, plus data for a write;
- for a read, waits for the response packet and pulses `rsp_valid`.

On the target side, requests queue in a four-entry queue and are carried out
on the memory bus. A read is answered with a response packet. Response packets
bypass that queue, so two nodes reading each other at the same moment cannot
block each other.

A broadcast write is sent as a broadcast packet. It writes every node except
the sender.

### Ring Bus (`ring_node`)

The Ring Bus is a side channel that does not depend on the packet network. It
joins the 27 nodes of a card in a one-way ring, 0 -> 1 -> ... -> 26 -> 0.

A message (`ring_msg_t`) carries an op (write, read, response, broadcast),
destination and source stations, a 32-bit address and 64-bit data. Each
station handles a message as follows:

- it carries out a write or read meant for itself, and sends a read's response
  on round the ring;
- it hands a response meant for itself to its initiator;
- it writes a broadcast into its own memory and passes it on. The sending
  station writes it too, and removes it when it comes back around.
- it passes everything else along.

Passing traffic goes first, then the station's own responses, then its own
commands. Each ring link is a register that takes a new message only once the
previous one has left. A message therefore advances at most every other
cycle, which keeps the ring free of combinational paths all the way round.

On a card, the host ports of node 000 are the Ring Bus and NetTunnel
initiators. They stand for the PCIe host connection of that node.

## The card (`inc_card`)

`inc_card` places 27 `inc_node`s at `card_origin + (lx, ly, lz)`.

Internal links:

- It wires the 54 internal single-span links between neighbours.
- It closes the ring through the nodes in index order.

External links:

- `ext_link_out/ext_link_in[27][12]` are indexed by node and router port
  minus one.
- Of these 324 ports, 108 are single-span links that stay on the card; they
  are tied to zero and their inputs are ignored.
- The remaining 216 leave the card: 54 single-span face links and all
  27 x 6 = 162 multi-span links.
- That makes 432 one-way connections, as the paper counts for a card.

A system is built by connecting the external ports of several cards as the
backplane would: card origins are multiples of 3, the faces meet, and
multi-span links run from node (x, y, z) to (x±3, y, z) and so on.

## Latency

The latency table covers one Bridge FIFO word sent from node 000 of a card.
It counts cycles from the write cycle to the cycle the word can be read at
the receiver, measured in the two-card test at full size:

| hops | 0 | 1 | 3 | 6 |
|---|---|---|---|---|
| cycles | 6 | 9 | 15 | 24 |

The Bridge FIFO units, the muxes and the local router pass cost 6 cycles. Each
hop adds 3: one cycle for the link register, one for the receiving link
buffer, and one for the router. The paper's measured 0.25, 1.1, 2.5 and
4.7 µs also grow roughly linearly with hops. They are dominated by the
serial links and software, which are not part of this logic.

## Sizes

Defaults are those of the operational 432-node system: `SYS_X` = 12,
`SYS_Y` = 12, `SYS_Z` = 3.

Coordinates are 5 bits per axis, so larger systems only need larger
`SYS_*`. The paper gives the larger four-cage system two ways:

- as 1296 nodes, which is 12x12x9;
- as up to 12x12x12.

Its bisection figure of 864 GB/s matches 12x12x9. Both sizes fit in the
coordinates.

Buffer sizes are this design's choice, not the paper's:

| buffer | default |
|---|---|
| link buffer | 16 flits |
| Bridge FIFO packet | 8 words |
| Bridge FIFO receive FIFO | 32 words |
| Postmaster message | 16 words |
| Ethernet descriptors | 4 of each |
| NetTunnel request queue | 4 |

## Where this departs from the paper or goes beyond it

- The paper gives the function of each unit, not its insides. Everything below
  the block level is this design's: register maps, packet formats, buffer
  sizes, the broadcast rule set, the credit grant policy, and the Ring Bus
  message format.
- No clock rate, SERDES, or link-level error handling. Links are parallel and
  error-free.
- The router has no deadlock avoidance (see above).
- Postmaster data is always written to memory at the target. The paper also
  lets target FPGA logic consume it directly; that path is not built.
- The Ring Bus has no "read all" operation that collects the same address
  from every node of a card. The host issues 27 reads instead.
- NetTunnel's broadcast write does not write the sending node; the Ring Bus
  broadcast does.
- The gateway node (100) with its real Ethernet port, and the second PCIe node
  (200), are ordinary nodes here. Only node 000 has host command ports.
- The paper mentions console forwarding over the network and other
  diagnostic features (JTAG chain, host-side debug software). They are not logic
  in this design.
- Verilator reports `rst_n` of `inc_card` as used both asynchronously and
  synchronously. All flip-flops reset asynchronously. The synchronous use is
  the `disable iff (!rst_n)` of the handshake assertions, which is not
  hardware.

## Files and simulation

`rtl/` holds one module or package per file:

- `inc_pkg` (types and constants) and `sync_fifo` (helper);
- link and router: `link_port`, `packet_router`;
- mux and demux: `packet_mux`, `packet_demux`, `bridge_fifo_mux`,
  `bridge_fifo_demux`;
- protocol units: `bridge_fifo_tx`, `bridge_fifo_rx`, `postmaster`, `eth_dma`,
  `nettunnel`, `ring_node`, `bus_arbiter`;
- tops: `inc_node`, `inc_card`.

`tb/` holds a self-checking testbench for each module (`<module>_tb.sv`),
plus helpers:

- a memory model (`mem_model`);
- a link terminator (`link_sink`);
- check macros (`tb_common.svh`).

Each testbench prints `TB_RESULT checks=N failures=M`.

- `inc_node_tb` joins two nodes.
- `inc_card_tb` runs two full-size cards with 54 nodes and all the protocols
  together. It counts multi-span hops, detours, broadcasts, credit stalls and
  Bridge FIFO back-pressure, and fails if any of them never happened.

To run one testbench, from the directory that holds `rtl/` and `tb/`:

    cd tb
    verilator --binary --timing --assert -I../rtl -I. ../rtl/inc_pkg.sv \
        -y ../rtl -y . inc_card_tb.sv --top-module inc_card_tb -j 8
    ./obj_dir/Vinc_card_tb

The card test takes about a minute and a half to build and a few seconds to
run.
