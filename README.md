# APEnet+ node: packet switching for a 3D torus of PC cluster nodes

APEnet+ links each PC of a cluster directly to its six neighbours in a three
dimensional torus: X+, X-, Y+, Y-, Z+ and Z-. There is no central switch.
Every node's network card carries a small router. A packet leaves the host
through the card's network interface and crosses the torus hop by hop. Each
card it passes forwards it without any help from that card's host. The last
card writes the payload straight into its host's memory. That last step is
remote DMA (RDMA): the sender names the address in the receiver's memory.

This RTL is the packet-switching logic of one card. It covers:

- the network interface, which cuts host transfers into packets and writes
  the packets that arrive into memory;
- the 7x7 router;
- the six torus links. Each link bonds four serial lanes and runs a light
  framing protocol with CRC checking, re-transmission, credits and two
  virtual channels.

The card's PCIe core, embedded processor, DDR3 controller and serial
transceivers are not included. The node's ports stand where they would
connect.

All logic runs on one clock. The datapath is 128 bits wide, which gives
4 GB/s at the card's 250 MHz bus clock.

## Block structure

```
             host side (PCIe core / firmware)
   cmd, hd_* (transfer + data)      mw_* (memory writes), ev (events)
                  |                              ^
              +---v------------------------------+---+
              |  net_if  (TX: fragment, RX: write)   |
              +---+------------------------------^---+
                  | port 6                       |
        +---------v------------------------------+---------+
        | router: dor_route x7, rr_arbiter x7, xbar_switch |
        +--+------+------+------+------+------+------------+
           |0 X+  |1 X-  |2 Y+  |3 Y-  |4 Z+  |5 Z-
        torus_link x6: link_tx, link_rx, lane_align, 2 x sync_fifo (VC buffers)
           |
       4 lanes x 32 bit out / in per link (to the transceivers)
```

| file | role |
|---|---|
| `apenet_pkg.sv` | widths, header/footer/flit types, control-word codes, host command and event types |
| `crc32_d128.sv` | CRC-32 over one 128-bit word per cycle |
| `rr_arbiter.sv` | round-robin arbiter, one per router output |
| `dor_route.sv` | dimension-ordered route and virtual-channel choice |
| `xbar_switch.sv` | 7x7 crossbar |
| `router.sv` | wormhole router built from the three blocks above |
| `sync_fifo.sv` | first-word fall-through FIFO |
| `lane_align.sv` | de-skews the four lanes of a link |
| `link_tx.sv`, `link_rx.sv` | the two halves of the link protocol |
| `torus_link.sv` | one link: both protocol halves, the aligner and two VC buffers |
| `net_if.sv` | network interface |
| `apenet_node.sv` | the whole node (top) |

## Packets

A packet is one header word, 0 to `MAX_PAYLOAD` payload words and one footer
word. Every word is 128 bits. The envelope is fixed and the payload length
varies. Inside the node, a word travels as a *flit*, which is the 128-bit
word plus `sop` (set on the header) and `eop` (set on the footer).

| header bits | field |
|---|---|
| 127:80 | destination address in the receiver's memory (bytes) |
| 79:72 | reserved |
| 71:64 | operation: 1 PUT, 2 GET, 3 SEND |
| 63:48 | payload length in words |
| 47:24 | source X, Y, Z (8 bits each, X lowest) |
| 23:0 | destination X, Y, Z |

The footer repeats the length in bits [31:16]. Bit 0 is `perr`. Any link
that receives the payload with a CRC error sets `perr`, and the error is
reported to the host. Payload errors are left to software to handle.
Header and footer errors are repaired by the link itself.

## Routing and why it cannot deadlock

`dor_route` corrects X first, then Y, then Z. When all three coordinates
match, the packet goes to the local port. In each ring it goes the shorter
way round. On a tie it goes +.

The router is wormhole switched. An input's header asks for one output. The
round-robin arbiter of that output grants one requester. The connection is
then held until the footer passes.

Routing is combinational. A header that wins arbitration leaves the router
one cycle after it arrived. The card this models measured 60 ns, which is 15
cycles at 250 MHz.

On its own, dimension order removes cycles between dimensions. Each ring of
the torus is still a cycle, though, and each link has two virtual channels
(VCs) to break it. The rule here is the usual *dateline* rule:

- A packet enters a dimension on VC0.
- It keeps its VC while it travels on in that dimension.
- It switches to VC1 when it crosses the ring's wrap-around link. That link
  goes from N-1 to 0 going +, or from 0 to N-1 going -.

A packet on VC1 never needs the wrap link again. So the channels of one ring
form a chain, not a loop.

Two further choices make this hold in the hardware:

- **Virtual cut-through on the links.** The sender starts a packet on a VC
  only when the far end's buffer has room for the whole packet. That is
  `len + 2` credits. A packet therefore never stops half-way across a link
  and holds that link's other VC. `BUF_DEPTH` must be at least
  `MAX_PAYLOAD + 2`. The defaults are 512 and 256.
- **No head-of-line blocking between VCs.** A link's receive side offers
  the router the heads of its two VC buffers in turn. It keeps alternating
  until the router grants one (`rx_grant`). A header whose output is busy
  therefore does not block a packet waiting on the other VC.

## The link protocol

Each direction of a link carries one 128-bit word per cycle. The word is
split over four 32-bit lanes: lane *i* carries bits `[32i+31:32i]`.

### Lane bonding

After reset, `link_tx` sends `TRAIN_CYCLES - 1` words of `0xBCBCBCBC` on
every lane. It then sends one word of `0xE0E0E0E0`, the end marker.

`lane_align` watches each lane for the end marker. From the first marker
seen, it counts how many cycles each lane's marker came early. That lane is
then delayed by the same number of cycles. `locked` rises once the marker
has come out aligned on all four lanes.

Skew of up to `MAX_SKEW - 1` cycles is tolerated. The receiver may come out
of reset late, as long as it is before the end marker.

### Framing (word stuffing)

A *control word* has `0xBCBCBCBC` in bits [127:96], a type in [95:88] and an
argument in [87:0]. Every other word is data. If a data word happens to
begin with `0xBCBCBCBC`, it is sent after an `ESC` control word. The receiver
then takes the next word as data whatever it holds. Idle cycles carry `IDLE`.

| type | code | argument |
|---|---|---|
| IDLE | 0 | - |
| ESC | 2 | - |
| HCRC | 3 | [31:0] CRC of the header, [32] VC of the packet |
| FCRC | 4 | [31:0] CRC of the footer, [63:32] CRC of the payload |
| ACKH, NAKH | 5, 6 | - |
| ACKF, NAKF | 7, 8 | - |
| CREDIT | 9 | [15:0] words freed on VC0, [31:16] on VC1 |

### Sending a packet

1. **Header.** The header and its HCRC word are sent. The sender then waits
   for an answer.
   - The receiver checks the CRC.
   - If the CRC is bad, the receiver drops the header and sends NAKH. The
     sender sends the header again.
   - If the CRC is good, the receiver stores the header in the VC buffer
     named in HCRC and answers ACKH.
2. **Payload.** The payload follows in a stream. A running CRC covers it.
3. **Footer.** The footer and FCRC follow, and the sender again waits.
   - A bad footer CRC gets NAKF, and the footer is sent again.
   - If the payload CRC does not match, the receiver sets `perr` in the
     stored footer.

So the header and footer, which the routing depends on, are always
delivered intact. A corrupted payload is delivered, flagged.

CRC-32 uses the reflected form of the IEEE polynomial (constant
`0xEDB88320`). Its start value is `0xFFFFFFFF` and there is no final XOR.
Bytes are taken from byte 0 (bits [7:0]) up, least significant bit first.

### Credits and priority on the wire

Each link's transmitter also carries the answers and credit returns of the
receiver beside it, on the same node. Each cycle it sends one word, chosen
in this order:

1. the data word owed after an ESC;
2. a pending ACK or NAK;
3. a pending CREDIT word, which carries the words popped from each local VC
   buffer since the last one;
4. packet data;
5. IDLE.

A credit counter per VC starts at `BUF_DEPTH`. It drops by one for each word
sent and rises by each CREDIT received.

## Network interface

**Transmit.** The host hands `net_if` a command: destination, operation,
memory address and length in words. The host then streams the data on
`hd_*`.

- The transfer is cut into packets of at most `MAX_PAYLOAD` words.
- The address advances by 16 bytes per word from one packet to the next.
- `cmd_done` pulses after the last footer.

**Receive.** Every arriving packet's payload is written to `mw_addr`
(header address + 16 bytes per word) through the `mw_*` handshake. At the
footer, `ev` reports the source, operation, address, length and `perr`.

On the card, the embedded processor's firmware handles GET and SEND and
translates virtual to physical addresses. Here those packets are written
and reported like PUT, and addresses are used as given.

## Where this design departs from, or adds to, the card

The card's description gives the block structure and these features:

- 6 links of 4 bonded lanes;
- 2 VC buffers per link;
- credit flow control built into the link protocol;
- header and footer re-transmission;
- a payload error flagged in the footer;
- CRC-32;
- dimension-ordered wormhole routing;
- a 7x7 switch;
- a 128-bit, 250 MHz datapath.

Everything below is this design's own choice:

- **Formats.** Header and footer field layout, the control-word encoding and
  the ESC rule.
- **Handshakes.** Stop-and-wait ACK/NAK, the lane-training pattern and the
  alignment method.
- **Flow control and routing.** Virtual cut-through credit checking, the
  dateline VC rule, the X-Y-Z order and the shorter-way choice, and
  round-robin arbitration.
- **Sizes.** The buffer depths (512 words per VC, 16-word FIFOs), the
  4 KB maximum payload and the 8-bit coordinates.
- **Latency.** A router latency of 1 cycle. The card measured 60 ns, which
  is 15 cycles. This design is faster, not slower.
- **Not included:**
  - the PCIe core, the embedded processor and its firmware (RDMA GET,
    address translation);
  - the collective-communication engine, the Ethernet port and the DDR3
    controller;
  - the transceivers, including clock recovery. The links are assumed to
    run on the node's clock.

## Rates against the card's figures

The card's published figures set the rates this logic must keep up with.

- **Link.** The link logic moves one 128-bit word per cycle. At 250 MHz that
  is 32 Gbps. The card's raw link rate is 34 Gbps (4 lanes x 8.5 Gbps).
  After the transceivers' 8b/10b line coding, only 27.2 Gbps of that is
  data, so the logic keeps up. The prototype link has been run at 3 Gbps
  per lane, which is 12 Gbps per link.
- **Host.** The network interface also takes or gives one word per cycle,
  which is 4 GB/s each way. That matches the PCIe X8 Gen2 host port.
- **Links in use.** A torus dimension of size 1 is never routed along. The
  same logic therefore serves the 4-link build, which has no Z links, with
  the Z size set to 1.

## Parameters

| parameter | default | where | meaning |
|---|---|---|---|
| `BUF_DEPTH` | 512 | node, torus_link, link_tx | words per VC receive buffer; at least `MAX_PAYLOAD + 2` |
| `MAX_PAYLOAD` | 256 | node, net_if | payload words per packet |
| `FIFO_DEPTH` | 16 | node, net_if | network-interface TX/RX FIFOs |
| `TRAIN_CYCLES` | 16 | node, torus_link, link_tx | length of lane training |
| `MAX_SKEW` | 8 | node, torus_link, lane_align | lane skew tolerated, in cycles, plus one |

## Simulation

Every block has a self-checking testbench, `tb/tb_<module>.sv`. Each one:

- compares the block's outputs with an independent model;
- prints `TB_RESULT checks=N failures=M`;
- stops itself with a watchdog.

`tb/tb_util_pkg.sv` holds a bit-serial, MSB-first CRC-32 reference and
helpers for building control words. To run a testbench:

```
verilator --binary --timing --assert -Irtl -Itb rtl/apenet_pkg.sv tb/tb_router.sv \
          --top-module tb_router -Mdir obj_router
./obj_router/Vtb_router
```

`tb_apenet_node` is the end-to-end test. It builds 8 nodes with default
parameters as a 4x2x1 torus. Skewed lanes join the nodes, each lane delayed
0 to 4 cycles.

- Every node sends 6 transfers, with random lengths and destinations.
- One transfer is 300 words long, so it is split into 2 packets.
- Seven nodes each send 300 words to node 5. Node 5's host meanwhile
  refuses memory writes for about 4000 cycles.
- Bits are flipped on three links, hitting header, footer and payload.

The test checks the following:

- Every word is written at the right address.
- Every word outside a packet flagged with `perr` has the right data.
- Every flagged packet really does hold corrupted data.
- Every event names the right source.
- Every transfer completes, and every link locks.

It also counts the following mechanisms, and counts a failure for any that
never happened:

- header and footer re-transmissions;
- payload errors;
- ESC insertions;
- credit stalls;
- output contention in routers;
- hops on VC1;
- fragmentation;
- memory back-pressure.

A run takes about 6700 cycles and 20 s.
