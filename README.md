# SCALP node fabric for distributed multimodal self-organizing maps

## The idea

A Reentrant SOM (ReSOM) learns from several sensory modalities at once
without labels. Each modality (handwritten digits, spoken digits, pictures
of clothes, hand signs) gets its own self-organizing map (SOM). A map is a
grid of neurons whose weight vectors arrange themselves over the data.
Maps are tied together in pairs by Hebbian lateral weights. At inference,
each map computes an activation for every neuron from its own input. One
board gathers the other maps' activation maps and combines them through the
lateral weights to choose the winning neuron and its label.

Because every map is computed independently, each map can run on its own
board. The boards form a 3D mesh of SCALP nodes. A SCALP node is a board
with a Zynq device (ARM processor plus FPGA fabric) and high-speed serial
links (HSSL) to up to six neighbours: north, south, east, west, top and
bottom. The SOM and ReSOM arithmetic runs as software on each node's
processor. What must be hardware is the fabric that moves activation maps
between boards:

* a crossbar router that forwards packets toward any node in the mesh,
  without involving the processors of the nodes in between;
* a link layer per neighbour port that checks each packet's integrity;
* a receive FIFO and a DMA channel between the router and the processor's
  memory.

This repository holds synthesizable SystemVerilog for that node fabric.
The processor, the DDR memory and the serial transceivers are outside it
and appear as ports.

For scale: in the four-board setup, each outer board computes a 16x16
activation map (256 values). Sending one map takes about 16 ms in the
reference software stack, and computing it takes about 160 ms. Here the
same map is 128 words of 8 bytes. The fabric moves it in under a thousand
clock cycles, about 10 µs at 100 MHz. The limit is the DMA, which keeps one
memory read outstanding at a time.

## Block structure

```
                     processor (registers)     DDR memory
                              |                 |      |
                          cfg_*            rd_*  |      | wr_*
                              v                 v      |
                          +------------------------------+
                          |          scalp_dma           |
                          +------------------------------+
                             | tx stream        ^ rx stream
                             v                  |
                             |          +----------------+
                             |          | axis_fifo (64) |  receive FIFO
                             |          +----------------+
                             v                  ^
 lane N/S/E/W/T/B  +----------+   +---------------------------+
 <---------------> |hssl_link |<->|        scalp_router       |
  (x6, one per     |  tx: CRC |   | 7 input FIFOs, 7 arbiters,|
   neighbour)      |  rx: chk |   | crossbar, route_compute   |
                   +----------+   +---------------------------+
```

`scalp_node` is the top. It has one `scalp_router`, six `hssl_link`s
(router ports 1..6), one `axis_fifo` as the receive FIFO on the router's
local output, and one `scalp_dma` on the local port.

| file | role |
|---|---|
| `rtl/scalp_pkg.sv` | word and packet sizes, port numbering, header layout, CRC-32 function |
| `rtl/scalp_node.sv` | top: the node fabric |
| `rtl/scalp_router.sv` | 7-port crossbar packet switch |
| `rtl/route_compute.sv` | destination address to output port |
| `rtl/rr_arbiter.sv` | round-robin arbiter, one per router output |
| `rtl/axis_fifo.sv` | word FIFO: the receive FIFO and the router input buffers |
| `rtl/hssl_link.sv`, `hssl_link_tx.sv`, `hssl_link_rx.sv` | link layer: CRC framing and checking |
| `rtl/scalp_dma.sv` | memory to and from the router, with a register file |

## Packets

Every stream in the node carries 64-bit words with a `last` flag and a
valid/ready handshake, in the manner of AXI stream. A word moves on a
clock edge where both `valid` and `ready` are high. A packet is one header
word followed by 1 to 64 payload words. The 8-byte word and the 64-word
packet come from the platform. The header is this design's own:

| bits | field | meaning |
|---|---|---|
| 3:0 / 7:4 / 11:8 | `dst.x / dst.y / dst.z` | destination node |
| 15:12 / 19:16 / 23:20 | `src.x / src.y / src.z` | sending node (filled in by the DMA) |
| 30:24 | `len` | payload words that follow (1..64) |
| 63:31 | `user` | free for software (zero when sent by the DMA) |

Coordinates are 4 bits per axis, which allows up to 16x16x16 nodes. The
largest array described for the platform is 3x3x3.

## Routing and the crossbar

`route_compute` compares the destination with the node's own address
(`here`, an input of the node, normally strapped per board). It sends the
packet:

1. east if `dst.x > here.x`, west if `dst.x < here.x`;
2. otherwise north or south, by `y`;
3. otherwise top or bottom, by `z`;
4. otherwise to the local port.

This is dimension-order routing. Dependencies between waiting packets
cannot form a cycle, so the mesh cannot deadlock. The signs are a
convention: east is +x, north is +y, top is +z. Cabling must follow it. A
node's north lane faces its upper neighbour's south lane, and its east lane
faces the east neighbour's west lane.

`scalp_router` uses wormhole switching, one packet at a time per output:

* Each input has a 4-word FIFO. While an input is not connected to any
  output, the word at the head of its FIFO is a header, and its route
  becomes a request to one output.
* Each output has a round-robin arbiter. When the output is free, it grants
  one requesting input. It stays connected to that input until the word
  flagged `last` has passed. The arbiter's priority moves past the winner,
  so every input is served within seven packets.
* The crossbar is a multiplexer per output. Packets bound for different
  outputs pass at the same time. A packet whose output is busy waits in its
  input FIFO and holds `in_ready` low.

Timing: a header accepted at an input in cycle *n* is granted in cycle
*n+1* and offered at the output in cycle *n+2*. Each following word takes
one cycle, so a free path carries one word per clock. The router test
measures this.

A packet addressed beyond the edge of the mesh is routed to a port with no
neighbour. It waits there, and so does everything behind it on that input.
Software must address only existing nodes.

## Link layer: why packets are buffered whole

The platform promises that links between neighbours deliver intact data.
This design does that with a CRC per packet.

* `hssl_link_tx` passes the packet's words to the lane unchanged, with
  `lane_last` low. After the packet's last word it appends one check word:
  the complement of the CRC-32 (IEEE polynomial, reflected, initial value
  all ones) over all the packet's words, in bits 31:0. On the lane,
  `lane_last` marks only the check word.
* `hssl_link_rx` writes incoming words into a 256-word circular buffer and
  updates a running CRC. When the check word arrives and matches, the
  packet is committed: its final word gets the `last` flag, and the router
  may start reading it. On a mismatch, the write pointer returns to the
  start of the packet. The packet disappears and `crc_errors` counts it.
  There is no retransmission. Software that needs every packet must detect
  the loss.

Because the router never sees a packet before it has been checked, a
corrupted packet cannot be half-forwarded. The cost is latency: each hop
adds the packet's length. The buffer holds two of the largest frames
(65 words each), so one packet can drain while the next arrives. `lane_rx_ready`
drops only when the buffer is full.

The lane ports are parallel 64-bit words. The transceiver that serialises
them is not part of this RTL. It must carry the valid/ready flow control
across the cable (for example with credit or pause signalling) and cross
from the recovered clock to the node clock. At 6.25 Gb/s, one 64-bit word
per cycle matches a fabric clock near 98 MHz. With 8b/10b line coding it
matches about 78 MHz.

## Receive FIFO and DMA

Packets for this node leave the router's local output into a 64-word
`axis_fifo`, which holds one full packet. From there, `scalp_dma` writes
every word, header included, to consecutive memory words. The DMA has a
memory write port (`wr_req/wr_addr/wr_data`, accepted when `wr_ready`) and
a memory read port (`rd_req/rd_addr`, accepted when `rd_ready`, with data
returned later on `rd_valid/rd_data`). It keeps one read outstanding at a
time.

The processor drives the DMA through 32-bit, word-addressed registers:

| addr | name | access | meaning |
|---|---|---|---|
| 0 | CTRL | W | bit 0 = 1 sends one packet (ignored while busy or if MM2S_LEN is 0) |
| 1 | MM2S_ADDR | R/W | memory word address of the first payload word |
| 2 | MM2S_LEN | R/W | payload words, 1..64; larger values are cut to 64 |
| 3 | MM2S_DST | R/W | destination `{z,y,x}` in bits 11:0 |
| 4 | S2MM_ADDR | R/W | where received words go; writing it clears the two counters below |
| 5 | STATUS | R | bit 0: a packet is being sent |
| 6 | S2MM_WORDS | R | words written since S2MM_ADDR was set |
| 7 | S2MM_PKTS | R | packets received since S2MM_ADDR was set |
| 8 | MM2S_PKTS | R | packets sent since reset |

To send an object, software splits it into chunks of at most 64 words. For
each chunk it writes ADDR, LEN, DST and CTRL, then polls STATUS. On the
receiving side, it waits for S2MM_PKTS to grow and reassembles the object
by walking the headers (`len` gives each packet's extent). While sending,
each payload word takes the memory read latency plus two cycles, because
one read is outstanding at a time. Receiving takes one word per cycle
unless memory stalls.

## Node ports

`scalp_node` parameters: `ADDR_W = 32`, `RX_FIFO_DEPTH = 64`,
`LINK_DEPTH = 256`, `ROUTER_DEPTH = 4`. All are defaults. Only the 64-word
FIFO depth comes from the platform description.

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | one clock; synchronous reset, active low |
| `here` | in | node address `{z,y,x}` |
| `cfg_we, cfg_addr[3:0], cfg_wdata[31:0]`, `cfg_rdata` | in, out | DMA registers |
| `rd_*`, `wr_*` | | memory ports (see above) |
| `lane_tx_{data,last,valid}[6]`, `lane_tx_ready[6]` | out, in | to the transceivers |
| `lane_rx_{data,last,valid}[6]`, `lane_rx_ready[6]` | in, out | from the transceivers |
| `crc_errors[6]`, `packets_ok[6]` | out | 16-bit counters per link |

Lane index *d* is router port *d+1*: 0 north, 1 south, 2 east, 3 west,
4 top, 5 bottom. Unused lanes are tied to `valid = 0` and `ready = 0`.

## What follows the platform and what is this design's own

These come from the platform description:

* a node has a routing layer and a processor layer with CPU, DDR and DMA;
* the DMA connects to the router's local port;
* the router is a crossbar with a local port and ports to six neighbours;
* packets can reach remote nodes through intermediate routers;
* nodes have 3D addresses;
* router and DMA interfaces are AXI-stream-like;
* the receive FIFO records packets of 64 words of 8 bytes;
* links guarantee integrity between neighbours.

These are this design's own choices:

* the header layout and the 4-bit coordinates;
* dimension-order routing and its direction signs;
* wormhole switching with round-robin arbitration, and the 4-word input
  FIFOs;
* CRC-32 framing, store-and-forward receive, discard without retransmission,
  and the 256-word link buffer;
* the DMA register map, single-packet transfers, and the memory handshakes;
* a single clock for the whole node.

The actual platform's router and link protocol may differ in all of these.
Treat this RTL as one consistent realisation of the described behaviour,
not as a copy of the original firmware.

Left out on purpose:

* SOM training and activation, Hebbian learning, labelling and ReSOM
  prediction. On this platform these run as software on the processor.
* Serialisation of data objects into packets, which is also software.
* The transceivers, the processor and the DRAM.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints one line
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it shows |
|---|---|
| `tb_axis_fifo` | fill to 64, refusal when full, drain, 3000 cycles of random traffic against a queue model |
| `tb_route_compute` | all 4096 address pairs in a 4x4x4 cube against the routing rule; 500 random hop-by-hop walks reach their destination in the Manhattan distance |
| `tb_scalp_router` | 280 random packets on all 7 ports with random stalls, scoreboarded per input/output pair; contention occurs; 2-cycle header latency and 1 word/cycle measured |
| `tb_hssl_link` | loop-back through a channel that flips bits in one packet in five: corrupted packets never appear, intact ones arrive whole and in order, counters match, one check word per packet, no release before the check word |
| `tb_scalp_dma` | packets of 1, 64, 100 (cut to 64) and random lengths against memory contents; received packets land word-for-word in memory; counters |
| `tb_scalp_node` | four nodes at default parameters, wired as a centre board with west, east and north neighbours; a packet forwarded across the centre node; a corrupted packet discarded; three 16x16 activation maps (2 packets each) sent to the centre node at once and reassembled from memory (about 1100 cycles); counts contention and stalls |
| `tb_scalp_array` | the full 3x3x3 cube of 27 default-size nodes: every node exchanges a 16-word packet with the node at the mirrored position (all six lane directions used, the centre node sends to itself), then the 26 outer nodes each send a 64-word packet to the centre at once; payloads and headers checked, and the total hop count checked against the Manhattan distances (108 and 54), which confirms every packet took a shortest path; about 450 and 2400 cycles |
| `tb_resom_two_board` | the two-board inference exchange repeated for a 300-sample test set: for each sample, board 2 sends a fresh 16x16 activation map (2 packets) to board 1, and every word is checked in board 1's memory; about 990 cycles per map |

`tb/ddr_model.sv` is a behavioural memory with a fixed read latency and
optional random write stalls. With `SEED` set it is preloaded with
`fill(SEED, i) = {SEED[15:0], i[15:0], (i * 0x9E3779B9) ^ (SEED * 0x85EBCA6B)}`.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/scalp_pkg.sv tb/tb_scalp_node.sv --top-module tb_scalp_node
./obj_dir/Vtb_scalp_node +verilator+rand+reset+2
```

Replace `tb_scalp_node` with any other testbench name. The router, node,
DMA and FIFO contain concurrent assertions for their handshake rules
(`--assert` enables them).

## Changing it

* Mesh size: widen `COORD_W` in `scalp_pkg`. The header has 33 spare bits.
* Packet size: `PKT_WORDS` (and `LEN_W`, so that `len` still fits). Keep
  `LINK_DEPTH` a power of two holding at least two packets plus their
  headers.
* Deeper router input FIFOs (`ROUTER_DEPTH`) reduce head-of-line blocking
  when several packets converge on one node, as in the ReSOM gather step.
