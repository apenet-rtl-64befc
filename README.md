# APENet link card: RTL of a 3D-torus cluster interconnect node

APENet joins commodity PCs into a three-dimensional torus for lattice-QCD-style
codes. Every PC carries one network card (the APELink) with six full-duplex
point-to-point links, X+, X−, Y+, Y−, Z+ and Z−, to its six neighbours. There is
no external switch. A packet that is not for the node it reaches is passed on by
that node's card, without involving its processor, until it arrives. Three
ideas carry the design:

* **Cut-through switching.** A card starts passing a packet on as soon as the
  header is in, long before the footer arrives. The published design forwards
  within ten clock cycles of the header's arrival.
* **Delivery is guaranteed.** A link never sends a packet that the receiving
  card could not store. The sender waits until the far receive buffer has room
  for the whole packet.
* **Clock domains joined only by dual-clock FIFOs.** The host bus side, the
  switch and the links each run on their own clock.

This repository holds synthesizable SystemVerilog for the card's network
controller, which was an FPGA on the original card. It follows the published
block diagram and the numbers printed in it. Where the publication says only
what a block does, the block's inner workings here are this implementation's
own choice. Each such choice is listed in [Departures and choices](#departures-and-choices).

## Packets

A packet is a sequence of 64-bit words:

| word | content |
|---|---|
| 0 | header |
| 1 … 2·LEN | payload, LEN 128-bit words (the smallest payload is one 128-bit word, 16 bytes) |
| 2·LEN+1 | footer |

A packet therefore occupies `2 + 2·LEN` words in every buffer. Flow control and
framing use this count everywhere.

Header layout (`header_t` in `apenet_pkg.sv`):

| bits | field | meaning |
|---|---|---|
| 63:48 | `tag` | free for software (the tests use it as a sequence number) |
| 47:44 | – | reserved |
| 43:32 | `src` {z,y,x} | source node, 4 bits per dimension; filled in by the sending card |
| 31:28 | – | reserved |
| 27:16 | `dst` {z,y,x} | destination node |
| 15:10 | – | reserved |
| 9:0 | `len` | payload length in 128-bit words, 1…1023 |

The footer holds the XOR of all payload words. The receiving card checks it.
With 4-bit coordinates a ring can have up to 16 nodes, which covers the 4×4×4
machine that the original builders planned. The largest packet is
LEN = 1023, which is 2048 words: exactly one channel receive buffer.

## Inside one card

```
            link_tx[6] / link_rx[6]  (48-bit words to/from the serializers)
                 |            ^
      clk_link   v            |
            +-------------------------+   x6 channels (X+ X- Y+ Y- Z+ Z-)
            | io_port_ctrl            |   gearbox, credits
            +-------------------------+
               | tx FIFO 16x64  ^ rx buffer 2K x 64      (dc_fifo)
      clk_sw   v                |
            +-------------------------+
            | remote_port_ctrl        |   packet framing
            +-------------------------+
                       ||
            +-------------------------+      +--------+
            | crossbar_switch (7x7)   |<---->| router |
            +-------------------------+      +--------+
                       ||
            +-------------------------+
            | local_port_ctrl         |   packet build / store, checksum
            +-------------------------+
        cmd queue 16 ^   tx 8K x 64 ^   | rx 8K x 64            (dc_fifo)
      clk_pci        |              |   v
            +-------------------------+
            | pci_port_ctrl           |   host registers
            +-------------------------+
                       ||  req_* / resp_*   (user side of the PCI-X core)
```

| file | block | clock |
|---|---|---|
| `apenet_pkg.sv` | shared types: header, link word, port numbers, routing configuration | – |
| `apelink.sv` | the top: all of the above wired together | all three |
| `dc_fifo.sv` | dual-clock FIFO, Gray-coded pointers; used for every domain crossing | two |
| `io_port_ctrl.sv` | link side of a channel: 64→40-bit gearbox, credit flow control | `clk_link` |
| `remote_port_ctrl.sv` | switch side of a channel: recovers packet boundaries from the header length | `clk_sw` |
| `router.sv` | routing decision for all seven crossbar inputs | combinational |
| `crossbar_switch.sv` | 7×7 packet switch, round-robin per output, cut-through | `clk_sw` |
| `local_port_ctrl.sv` | turns host commands into packets; stores delivered packets; checks footers | `clk_sw` |
| `pci_port_ctrl.sv` | register map seen by the host | `clk_pci` |

Crossbar port numbers are 0…5 for X+, X−, Y+, Y−, Z+, Z− and 6 for the local
port (`port_e`). The same order is used for `link_tx`/`link_rx`.

Two parts of the card are outside this RTL:

* The serializer/deserializer chips. Their 48-bit parallel sides are the
  `link_tx`/`link_rx` ports.
* The PCI-X protocol core. Its user side is assumed to be a simple stream of
  single 64-bit register accesses (`req_*`, `resp_*`).

## The link: chunks and credits

This is the least obvious part of the design.

**Word format.** Each serializer carries a 48-bit word per link clock
(`link_word_t`):

| bits | field |
|---|---|
| 47:46 | kind: `LK_IDLE`, `LK_DATA`, `LK_END` |
| 45:40 | credit: receive-buffer words freed at the sender's end since its last word |
| 39:0 | 40 bits of packet stream |

**Gearbox.** The transmit side treats the words of a packet as one bit stream,
least significant bit first, and sends it 40 bits at a time. Five 64-bit words
make eight chunks. The accumulator holds up to 104 bits. A new word is loaded
whenever fewer than 40 bits are waiting, so a packet whose words are in the
transmit FIFO streams with no idle link words. A packet of N words takes
`ceil(64·N/40)` link words. The last of them is `LK_END`, and the bits after the
packet's end are padding. The receive side mirrors this. It appends each
chunk, writes a word to the receive buffer whenever 64 bits are complete, and
drops what is left at `LK_END`. Each packet therefore starts on a fresh chunk.
The receiver needs no framing state of its own.

**Credits.** Each `io_port_ctrl` keeps a credit counter in words, which starts
at the far receive buffer's depth (`CREDIT_INIT` = 2048).

* A packet at the head of the transmit FIFO starts only if the counter is at
  least its size `2+2·LEN`. The whole size is subtracted at once. While it
  waits, `credit_stall` is high.
* Each link word received adds its credit field back to the counter.
* For the return path, the receive buffer exposes its read pointer as seen in
  the link clock domain (`wrptr` of `dc_fifo`). Every clock, `io_port_ctrl`
  adds the pointer's advance to a pending count. Each outgoing link word
  carries up to 63 of it.

A receive buffer can therefore never overflow (an assertion checks this), and
a packet, once started, never stops for lack of room downstream of the link.
Deadlock avoidance beyond this, for example virtual channels, is not described
for the original design and is not built.

**Rate.** While a packet streams, each link clock carries 40 packet bits, which
is 5 bytes. At 133 MHz that is 667 MB/s per direction, and at 100 MHz 500 MB/s.
The original card quotes peaks of 676 MB/s and 508 MB/s, which is
5.07–5.08 bytes per clock. The 1.5 % gap is the closest this chunk format gets
to that figure; the original link format is not published.

## Routing and the crossbar

The `router` works in dimension order: first X, then Y, then Z. In each
dimension it takes the shorter way round the ring, and the plus direction when
both are equal. A packet whose destination equals the node's own coordinates
goes to the local port. Software can override the choice per dimension:
`ovr_en[d]` forces direction `ovr_dir[d]` (1 = minus). The configuration
(`route_cfg_t`) holds the node's coordinates, the torus size per dimension
(1…15, 0 = 16) and the override bits. It is written through the CONFIG
register. It crosses into the switch clock through a plain two-flop
synchronizer, so it must be written while the network is idle.

The `crossbar_switch` treats each input as a small state machine:

1. **Idle.** It waits for a header.
2. **Request.** It latches the router's answer and requests that output.
3. **Forward.** Once connected, it passes words through until the footer.

Each free output grants one requesting input per cycle, round-robin, and stays
connected until the footer has passed. Words move with valid/ready
back-pressure, so a packet is stretched across several cards at once. That is
what cut-through means here.

A header leaves the crossbar two switch cycles after it reaches an input. Most
of the delay comes from the way in. Measured from the moment the header word
is written into a channel receive buffer, including the dual-clock FIFO
crossing, to the moment it passes the crossbar, the total is 5 switch cycles.
The original design's bound is 10.

`remote_port_ctrl` gives the crossbar its framing (`sop`/`eop`). The receive
buffer stores bare words, so the controller assumes that the first word after
reset, and every word after a footer, is a header, and counts `2+2·LEN` words
from it.

## Host interface

`pci_port_ctrl` decodes single 64-bit accesses (byte addresses):

| address | access | effect |
|---|---|---|
| 0x00 CMD | write | queue a command (header layout; `src` is ignored and filled in by the card) |
| 0x08 TXDATA | write | append a payload word to the local transmit buffer |
| 0x10 RXDATA | read | next word of the local receive buffer (whole packets: header, payload, footer) |
| 0x18 STATUS | read | [15:0] receive-buffer words, [31:16] transmit-buffer words, [47:32] queued commands, [63:48] packets received with a bad footer |
| 0x20 CONFIG | read/write | routing configuration, bits 29:0 |

An access that cannot complete (a write to a full buffer, a read of an empty
one) is held off with `req_ready` low, the way a PCI-X target retries. Read
data returns one clock after acceptance on `resp_valid`/`resp_rdata`.

To send, the host writes the `2·LEN` payload words and then the command.
`local_port_ctrl` emits the header as soon as the command is there. It then
streams the payload as it becomes available and appends the XOR footer. A
command is sent only after its payload was written, so the packet leaves at
switch speed.

## Sizes and numbers

| quantity | this RTL (default) | source |
|---|---|---|
| datapath | 64 bit | published diagram |
| channel receive buffer | 2K × 64 per channel (`LINK_AW` = 11) | published diagram |
| local transmit / receive buffers | 8K × 64 each (`LOCAL_AW` = 13) | published diagram |
| command queue | 16 entries (`CMDQ_AW` = 4) | own choice |
| channel transmit FIFO | 16 × 64 (`TXQ_AW` = 4) | own choice |
| serializer word | 48 bit | published diagram |
| link payload | 40 bits per link clock | own choice |
| coordinates | 4 bits per dimension | own choice |
| header → crossbar output | 5 switch cycles (bound 10) | measured in simulation |

## Departures and choices

These are the places where this RTL goes beyond what the original design
documents, or differs from it:

* **Link word format and gearbox.** These are this implementation's. The
  result is 5 bytes per link clock against the published 5.07.
* **Credit flow control.** The published rule is only that transmission waits
  for room at the receiver. Counting credits in words, returning them inside
  the link words, and reserving room for the whole packet are this design's
  mechanism.
* **Routing.** The published design says the routing rules are simple and can
  be overridden by software. Dimension order, shortest direction, the tie rule
  and the form of the override are choices made here.
* **Header layout, XOR footer, command format, register map, host handshake.**
  All of these are invented here.
* **Per-channel transmit FIFO.** The published diagram shows one FIFO per
  channel, read here as the receive buffer. A 16-word dual-clock FIFO is added
  for the transmit direction, because every clock crossing must go through
  one.
* **One link clock for all channels.** The deserializers' recovered clocks are
  not modelled; received words are taken to be synchronous to `clk_link`.
* **Quasi-static configuration.** The routing configuration and the
  checksum-error count cross clock domains through two-flop synchronizers and
  are meant to change only while idle.
* **Not built.** DMA, zero-copy transfers and interrupts of the host
  interface are not built. They live in the PCI-X core and the driver.
  Collective operations are software.

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and stops with
`$finish`. Each has a watchdog.

| testbench | what it runs |
|---|---|
| `tb_dc_fifo` | fill/drain, full flag, latency through an empty FIFO, 400 random words on unrelated clocks |
| `tb_io_port_ctrl` | gearbox both ways, chunk counts, credit stall and release, credit return across pointer wrap |
| `tb_remote_port_ctrl` | framing of back-to-back packets under random back-pressure |
| `tb_router` | ≈9000 decisions against an integer reference, several torus shapes, with and without override |
| `tb_crossbar_switch` | 7 sources × 40 packets to random outputs, whole-packet and in-order delivery, 2-cycle latency, contention |
| `tb_local_port_ctrl` | packet building, late payload, XOR footer, receive path, one injected checksum error |
| `tb_pci_port_ctrl` | register map, hold-off on full/empty, status and configuration |
| `tb_apelink` | eight cards as a 2×2×2 torus with small buffers; see below |
| `tb_apelink_ring` | four full-size cards in one X ring: random traffic from every card, packets passing straight through a card, the wrap-around cable, the tie at distance two; packet counts per cable against a reference route |
| `tb_apelink_full` | two cards at full size in an X ring: 16-byte and 4 KB ping-pong, one 2048-word packet, a ping-pong sweep from 16 B to 16 KB, a 1 MB message one way, 64 KB each way at once; link rate of every packet |

`tb_apelink` runs these phases:

1. Ping-pong between neighbours and across three hops. Every hop's
   header-to-crossbar latency is checked against the bound of 10.
2. The routing override.
3. Random all-to-all traffic, including packets sent to the sending node
   itself.
4. A hot spot that stops reading until senders wait for credits.
5. One payload bit flipped on a cable, which must show up as a checksum error
   at the receiver.

The testbench counts each of these mechanisms and fails if one never happens.

`tb_apelink_full` drives the host side with back-to-back accesses, one word
per clock, so that the link sets the pace. Its ping-pong sweep prints the half
round trip for each message size. This includes the host model's writing and
reading: about 0.2 µs for 16 bytes, 10 µs for 4 KB and 40 µs for 16 KB. With all clocks at 133 MHz it
reports about 663 MB/s of payload for a 1 MB message (99.6 % of link clocks
busy). Sending 64 KB each way at once gives about 1.3 GB/s in total. The only
gaps are the credit round trip before each packet. A 2048-word packet cannot
start until the far channel buffer is empty again.

With Verilator 5, for example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl +libext+.sv \
    rtl/apenet_pkg.sv tb/tb_apelink.sv --top-module tb_apelink
./obj_dir/Vtb_apelink
```

Put the package first. The other files are found through `-y rtl`. The
end-to-end test takes about ten seconds, the full-size one about one second.

To change a size, set the parameters of `apelink`: `LINK_AW` and `LOCAL_AW`
for the buffers, and `CMDQ_AW` and `TXQ_AW` for the small FIFOs.
`CREDIT_INIT` follows `LINK_AW` automatically. Both ends of a link must use
the same `LINK_AW`. The largest usable LEN is `(2^LINK_AW − 2)/2`.
