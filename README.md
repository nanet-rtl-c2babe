# NaNet-1: a UDP-to-GPU network interface in SystemVerilog

A GPU can run a trigger algorithm with very stable timing once its input
data is in GPU memory. What spoils real-time behaviour is usually the road
there: a network card hands packets to the operating system, the kernel
network stack copies them, and a process finally pushes them to the GPU,
with latency that varies from packet to packet. NaNet removes software from
that road. An FPGA on a PCIe card terminates the network protocol in
hardware, strips UDP/IP from each datagram, and writes the payload with
peer-to-peer (GPUDirect RDMA) PCIe writes straight into a ring of buffers in
GPU memory. The application is told only when a buffer is complete. Every step
is a fixed pipeline, so the time from the last byte on the wire to the last
byte in memory is bounded and repeatable.

This RTL implements the NaNet-1 configuration of that architecture: one
Gigabit Ethernet channel, three ports for the APElink point-to-point links,
a packet router between them, and the Network Interface that moves data to
and from PCIe memory. The vendor cores (Ethernet MAC, PCIe endpoint, soft
microcontroller) and the APElink link layers are not included. Their sides
are ports of the top module `nanet1_top`.

## Data path at a glance

```
 GbE MAC rx ──Avalon-ST 32b──► udp_offloader ──32b payload──► nanet_ctrl ──flits──┐
                                                                                   │ port 1
 GbE MAC tx ◄─Avalon-ST 32b── udp_tx ◄──32b payload── nanet_ctrl_tx ◄──flits──────┤
                                                                                   │
 APElink 0..2 ◄──────────── 128-bit flits ─────────────────────────────► router ◄──┤ ports 2..4
                                                                                   │
 PCIe writes ◄── rx_block ◄──flits──────────────────────────────────────────────── │ port 0
                   ▲  ▲ alloc                                                      │
                   │  gpu_io_accel ──► buffer-complete events                      │
 PCIe commands ─► tx_block ──flits────────────────────────────────────────────────┘
 + data beats
```

The card is built from four layers, the same grouping as the original
architecture:

* **I/O interface**: one column per link. Each column has four stages: the
  physical coding (here the Ethernet MAC, external), a protocol manager
  (`udp_offloader` in, `udp_tx` out), an optional data-processing stage (a
  decompressor in the original, left out here: see *Departures*) and the
  APEnet protocol encoder (`nanet_ctrl` in, `nanet_ctrl_tx` out). The encoder
  turns link traffic into the card's internal packet format.
* **Router** (`router`): a crossbar that moves packets between the link
  columns and the Network Interface.
* **Network Interface**: `rx_block` and `gpu_io_accel` deliver packets into
  memory. `tx_block` injects packets the host wants to send.
* **PCIe core**: external. It turns write requests into PCIe memory writes
  and delivers host data for transmission.

## The internal packet format

Everything behind the protocol stage travels as APEnet+ packets of 128-bit
flits (`nanet_pkg::flit_t`). Each flit carries two side-band bits, `sop` and
`eop`. The first flit is a header (`nanet_pkg::apenet_hdr_t`):

| bits    | field      | meaning                                         |
|---------|------------|-------------------------------------------------|
| 3:0     | `dst_port` | router port the packet must leave on            |
| 7:4     | `src_port` | router port the packet entered on               |
| 23:8    | `len`      | payload bytes that follow                       |
| 39:24   | `tag`      | free field: UDP destination port on the GbE path |
| 127:40  | reserved   | zero                                            |

The header flit is followed by `ceil(len/16)` payload flits. Payload byte
*b* of a flit sits in bits `8b+7:8b`, so the flit is exactly the 16 bytes
that land in memory. The Ethernet side is big-endian (first byte in bits
31:24 of a 32-bit word). The encoder and decoder therefore reverse the bytes
of each 32-bit word as it crosses between the two formats
(`nanet_pkg::bswap32`). The original architecture names the APEnet+ format
but does not publish it, so this header layout is this design's own.

## Receiving UDP: the offload pipeline

`udp_offloader` watches the MAC stream word by word. The MAC is assumed to
run with its 16-bit receive shift (two pad bytes before the destination
address). The 42 bytes of Ethernet + IPv4 + UDP header then fill exactly
words 0 to 10, and the payload starts word-aligned at word 11. While the
header streams past, the offloader checks the following, each on the word
that holds it:

| word | check                                            |
|------|--------------------------------------------------|
| 3    | EtherType = 0x0800                               |
| 4    | version 4, header length 5 words (no IP options) |
| 6    | protocol 17 (UDP)                                |
| 8    | destination IP = configured, if checking is on   |
| 9    | destination UDP port = configured                |
| 10   | UDP length > 8                                   |

A frame that fails any check is swallowed and counted in `cnt_dropped`. In
the full system such traffic (ARP, management) is the microcontroller's
business, which is not modelled. A matching frame is forwarded cut-through.
The payload length comes from the UDP length field, so Ethernet padding on
short frames is dropped. The length is presented together with the first
payload word, which lets `nanet_ctrl` write the packet header before any
payload arrives. The pipeline takes one word per clock without bubbles, so
at 200 MHz its 32-bit channel carries 6.4 Gbps, six times the GbE line rate.
Checksums are not verified: a cut-through design cannot take back words it
has already forwarded.

`nanet_ctrl` sends the header flit (destination = register 0x03, normally
the Network Interface port 0; tag = UDP destination port). It then packs four
payload words into each flit, zero-pads the last flit and sets `eop` on it.
The header costs one cycle. After that the 32-bit input is never stalled by
the packing.

## The router

`router` (parameters `NPORTS`, `DEPTH`) has one `DEPTH`-flit FIFO per input.
When a header flit reaches the head of a FIFO, the input requests the output
named by `dst_port`. Each output has a round-robin arbiter (`rr_arbiter`).
The winner holds the output until its `eop` flit has passed (wormhole
switching), so packets are never interleaved on one output. Other outputs
keep working in parallel. A packet addressed to a port that does not exist
is read out and discarded, and `cnt_misrouted` counts it.

Timing: a header written into an idle input FIFO leaves its output two
clocks later (one clock to reach the FIFO head, one for the grant to
register). After that, one flit per clock per output. With 128-bit flits, a
port moves 2.8 GB/s at 175 MHz. The port count is a parameter. The flit width
is `nanet_pkg::FLIT_W`, shared by every block. The routing rule
(destination field) and the round-robin arbitration are this design's
choices: the architecture leaves both to the user.

## Delivering into GPU memory: the buffer ring

This is the part that makes the card useful to a GPU program, and the
part whose exact behaviour matters most to software.

The host registers up to `NBUF` (16) receive buffers through registers 0x10
and 0x11. Each has a bus address, a size in bytes and a flag saying whether
it is GPU memory or host memory. Register 0x09 then says how many entries
are in use. The buffers form a ring. `gpu_io_accel` keeps a pointer to the
current buffer and its fill level. For each packet that reaches the Network
Interface, `rx_block` asks it for room with the payload length and gets an
answer in the same clock:

1. **The packet fits** in what is left: it is granted at `base + fill`. Its
   length, rounded up to 16 bytes, is added to the fill level. If the buffer
   is now exactly full, it is *closed* as soon as that packet's last write
   has been accepted (`rx_block` reports this with `pkt_done`); nothing else
   is granted in between.
2. **The packet does not fit, but the buffer holds data**: the buffer is
   closed as it is, the pointer moves on, and the packet is granted from the
   fresh buffer one clock later.
3. **The packet is larger than a whole empty buffer**: it is granted with
   `alloc_drop`, and `rx_block` reads it out and throws it away (counted in
   `cnt_dropped`).
4. **No buffer is registered**: no grant. The receive path stalls and, in
   turn, the router and the link behind it.

Closing a buffer pulses `evt_valid` with the buffer index, address, number
of bytes written and memory type. This is the "buffer ready" signal the
application waits for. After the last registered buffer, the ring wraps to
entry 0. There is no handshake for the application to give a buffer back.
Software must consume buffers faster than the ring wraps, and must size
buffers as a whole number of its records. Each packet starts on a 16-byte
boundary. When datagrams are multiples of 16 bytes (64-byte trigger events,
for example), the buffer therefore holds a dense array of records.

`rx_block` turns each payload flit into one write request to the PCIe core:
address (incrementing by 16), 128-bit data, 16 byte enables (partial on the
last beat), GPU flag and `last`. The request is registered and held under
backpressure (`wr_ready`).

Events never overtake data. `rx_block` asks for room for a new packet only
once its write register is empty, so when a buffer is closed under rule 2
all of its writes have already gone to the PCIe core. Under rule 1 the event
waits for `pkt_done`. Either way, the event comes after the buffer's last
write request, and on a PCIe link the posted writes ahead of it keep that
order. The price is one idle clock between packets on the write side.

## Transmitting

The host posts a command (router port, length, tag) to `tx_block` and the
PCIe core streams the payload as 16-byte beats. `tx_block` sends a header
flit and the payload flits to the router. Towards an APElink port, the
packet leaves as it is. Towards the GbE port, `nanet_ctrl_tx` strips the
header and unpacks the flits into 32-bit words, keeping only `ceil(len/4)`
of them. `udp_tx` then prepends 11 header words: MAC addresses, EtherType,
an IPv4 header with its checksum, and a UDP header whose destination port is
the packet's tag, or register 0x08 if the tag is zero. The IPv4 checksum is
the ones'-complement of the ones'-complement sum of the ten 16-bit header
words. The UDP checksum is sent as zero, which IPv4 permits.

## Configuration registers (`nanet1_top`)

Written with `cfg_we`/`cfg_addr`/`cfg_wdata`, as the card's microcontroller
would:

| addr | content                                                   |
|------|-----------------------------------------------------------|
| 0x00 | UDP port accepted on receive                              |
| 0x01 | local IP (receive filter, transmit source)                |
| 0x02 | bit 0: check destination IP on receive                    |
| 0x03 | router port for received UDP payload (0 = memory)         |
| 0x04 | local MAC; 0x05 remote MAC; 0x06 remote IP                |
| 0x07 | UDP source port; 0x08 default UDP destination port        |
| 0x09 | number of buffers in the ring (0 stops reception)         |
| 0x10 | staging register: buffer address                          |
| 0x11 | commit buffer: [31:0] size, [47:32] index, [63] GPU memory |

After reset no buffer is registered, so nothing is delivered until the
ring is set up. Register 0x09 should be written last.

## Latency and throughput

With nothing else in flight, the last word of a UDP datagram becomes the
last write request a fixed number of clocks later, and the buffer event
follows one clock after that write is accepted. The offloader, the packer,
the router FIFO, the arbitration and the write register each add one or two
stages: the buffer event comes 5 clocks after the frame's last word. So the
card adds a constant, not a variable, to the time a buffer takes to fill.
When APElink traffic competes for the Network Interface port, a datagram
may wait behind one packet from each APElink channel. The end-to-end test
bounds that wait, and checks that the mean stays near the idle pipeline.

`tb_workload_rx_buffers` reproduces the two buffer-latency measurements the
card was characterised with. It fills GPU buffers of 64-byte events and
times each from the first word of the bunch to the buffer event, twice per
size; the two runs must agree to the clock. Over GbE, the frames arrive at
gigabit line rate with 16 events per datagram. Over APElink, 1024-byte
packets arrive back to back on one channel.

| buffer | GbE, clocks (µs at 200 MHz) | APElink, clocks (µs at 175 MHz) |
|-------:|----------------------------:|--------------------------------:|
| 16 events | 1 707 (8.5) | 68 (0.39) |
| 64 / 128 events | 6 949 (34.7) | 530 (3.0) |
| 256 / 1024 events | 27 915 (139.6) | 4 226 (24.2) |
| 1024 / 4096 events | 111 781 (558.9) | 16 898 (96.6) |
| 4096 / 16384 events | 447 243 (2 236) | 67 586 (386) |

The GbE column uses sizes 16, 64, 256, 1024 and 4096. The APElink column
uses 16, 128, 1024, 4096 and 16384. On GbE the time is the wire time of
the bunch plus the 5-clock pipeline. On APElink, one header flit per packet
and one idle clock between packets leave 15.5 bytes per clock, about 21.7
Gb/s at 175 MHz. That clock is an assumption: it is the lowest at which
the 16-byte datapath reaches the ~20 Gb/s quoted for APElink. Host-side
costs are not part of these numbers: software, the PCIe link and its
completion path.

Against the published NaNet-1 curves: over GbE, about 2 ms for a
4096-event buffer was reported. That is the wire time, as here, so the
card's own contribution is negligible. Over APElink about 1 ms was reported
for 16384 events (1 MB), against 0.39 ms here. The gap lies in what is not
modelled: the link layer and the PCIe writes into GPU memory, which run at
roughly 1 GB/s there. In this RTL the write side is the port `wr_ready`, and
the workload holds it ready at all times.

## Departures from the original design, and what is missing

Taken from the architecture: the four layers and their blocks; the 32-bit
UDP channel and its rate; the Avalon-ST MAC interface; the crossbar router
with a configurable number of ports; the split of the Network
Interface into transmit, receive and GPU I/O parts; delivery into a ring of
persistent buffers in GPU memory; the three APElink ports of NaNet-1.

Choices of this design, where the architecture gives no detail: the packet
header layout, the 128-bit flit, sop/eop framing, destination-port routing,
round-robin wormhole arbitration, FIFO depth, the buffer packing and
closing rules, the register map, all handshakes, and synchronous active-low
reset.

Narrower than the architecture allows:

* the router's port count is a parameter, but its width is fixed for the
  whole card by the flit type in the package, and it offers a single
  routing rule (by destination port). A different width or routing rule
  means editing the package or the router.
* a router port moves 16 bytes per clock, i.e. 2.8 GB/s at 175 MHz. That
  covers the ~20 Gb/s an APElink channel sustains, but not the 34 Gb/s raw
  rate of the link; the clock has to be raised for that.
* buffer completion is the only event. There is no interrupt, no
  completion queue in host memory and no way for software to hand a buffer
  back, so software must keep ahead of the ring.

Not implemented:

* the decompressor stage (no format is given). UDP payload passes through
  unchanged.
* the Ethernet MAC, the PCIe core with its DMA engines, and the Nios II
  microcontroller with its software. These are vendor parts; their
  interfaces are ports.
* the APElink physical layer, its word-stuffing protocol and link control.
  The three APElink router ports are ports of the top.
* the on-board memory, its controller and the "custom logic" slot of the
  Network Interface.
* the KM3link deterministic-latency transceiver and TDM protocol of the
  NaNet³ variant, and the 10GBASE-R channel of NaNet-10.
* the GPUDirect address translation inside the PCIe transactions. Buffer
  addresses are taken to be bus addresses the GPU has already exposed.

The single GbE channel delivers 125 MB/s. That is enough for the prototype
measurements, but not for the 400–700 MB/s a full ring-imaging trigger
needs. That needs several GbE channels or an APElink or 10GbE channel.

## Files

`rtl/`

| file | block |
|------|-------|
| `nanet_pkg.sv` | flit and header types, byte-swap helper, constants |
| `udp_offloader.sv` | receive protocol offload |
| `nanet_ctrl.sv` / `nanet_ctrl_tx.sv` | APEnet+ encapsulation / decapsulation |
| `udp_tx.sv` | transmit UDP/IPv4/Ethernet encapsulation |
| `router.sv`, `flit_fifo.sv`, `rr_arbiter.sv` | crossbar router |
| `tx_block.sv`, `rx_block.sv`, `gpu_io_accel.sv` | Network Interface |
| `nanet1_top.sv` | the card, with configuration registers |

`tb/` holds one self-checking testbench per block (`tb_<module>.sv`), plus
`tb_nanet1_top.sv`, the end-to-end test at the default size, and
`tb_workload_rx_buffers.sv`, the buffer-latency workload above. Each testbench
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog.
The top-level test runs UDP frames (good and filtered), APElink traffic
that competes for the memory port, an oversize and a misrouted packet, and
host transmissions to GbE and APElink at the same time, under random
backpressure. It checks every byte in memory, every packet start address,
every buffer event and every transmitted frame, and fails if any mechanism
(filter drop, router conflict, write stall, receive stall, ring wrap,
partial and full buffer closes, GPU and host writes, switching between
APElink channels, both transmit paths) never happened.

To simulate, for example the whole card:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/nanet_pkg.sv tb/tb_nanet1_top.sv --top tb_nanet1_top -o sim
./obj_dir/sim
```

Replace the testbench file and `--top` to run another one. Every module
lints cleanly with `verilator --lint-only -Wall`, apart from unused-bit
warnings on header fields.
