# A 400 Gb/s UDP/Ethernet core in SystemVerilog

Radio telescopes digitise very wide bands and stream the samples from FPGAs to
servers and GPUs. Much of that traffic is just one-way UDP: every FPGA sends fixed-size
datagrams to a known receiver, and a receiver on the server copies them into memory by
kernel bypass (raw Ethernet queue pairs or GPUDirect). This core is the FPGA side of
such a link at 400 Gb/s. It turns a user data stream into UDP/IPv4/Ethernet frames and
passes them to a 400GbE MAC. It filters received frames back down to a UDP payload
stream. It also lets a small on-chip microcontroller send and receive ordinary frames
(ARP, ICMP) over the same port.

Everything runs on one clock. The data path is a 1024-bit AXI-Stream bus, and at
390.625 MHz that is 1024 × 390.625 MHz = 400 Gb/s. The core has no per-byte
processing that would need a wider or faster path: one 128-byte beat is moved per
clock at every stage.

The RTL covers the packet-generation core: the streaming data path, the CPU data
path, the registers and ARP cache, the transmit arbiter and a test packet generator.
The MAC/PHY is not included. In the reference system it is a hard MAC/PCS/FEC block
plus 112 Gb/s transceivers (400GAUI-4, two transceiver quads in half-density mode),
which are vendor parts. The top level brings out the MAC's transmit and receive
AXI-Stream buses as ports instead.

## Block structure

```
               regs_axil_*                          cpu_axil_*
                    |                                    |
               +---------+  cfg, ARP MAC          +---------------+
               | eth_regs|---------------+        | cpu_data_path |
               | + ARP   |<--stat events |        |  TX ring      |---+
               +---------+               |        |  RX ring+filt |   |
                                         v        +---------------+   |
  s_tx_* --+--> [mux] --> streaming_data_path                 ^       |
  pkt_gen -+              framer -> TX ring ----> tx_arbiter <-+-------+
                                                  (round robin   |
                                                   + FIFO) ------+--> mac_tx_*
  m_rx_* <-- RX filter <- RX ring <---------------------------------- mac_rx_*
             (stream)                  also to the CPU path's RX ring
```

| File | Role |
|---|---|
| `eth400g_pkg.sv` | Bus width, beat struct `axis_t`, AXI4-Lite structs, register map, header builder and IPv4 checksum |
| `axil_slave.sv` | AXI4-Lite slave turned into a one-cycle register port (helper) |
| `arp_cache.sv` | 256 × 48-bit IP→MAC table, two read ports |
| `eth_regs.sv` | Control registers, statistics counters, ARP cache window |
| `pkt_ring_buffer.sv` | Slot-based store-and-forward frame ring, used four times |
| `rx_ring_buffer.sv` | Ring buffer for a MAC that cannot be stalled: drops whole frames |
| `udp_tx_framer.sv` | Builds the UDP/IPv4/Ethernet frame in place in the TX ring |
| `rx_filter.sv` | Checks MAC/IP/port; strips headers (stream mode) or passes the rest (CPU mode) |
| `streaming_data_path.sv` | Framer + TX ring, RX ring + stream filter |
| `cpu_data_path.sv` | Memory-mapped TX/RX frame buffers for the microcontroller |
| `axis_fifo.sv` | Small AXI-Stream FIFO (helper) |
| `tx_arbiter.sv` | Frame-level round robin between the two paths, into a FIFO |
| `pkt_gen.sv` | Rate-adjustable test source with a 16-bit sequence counter |
| `eth400g_top.sv` | The core |

## Conventions on the 1024-bit bus

- Byte 0 of a beat is `tdata[7:0]` and is the first byte on the wire.
- `tkeep` is a run of ones from bit 0. Only the last beat of a frame (`tlast`) may be
  partial.
- Frames on `mac_tx_*` and `mac_rx_*` have no preamble and no FCS. The MAC adds the
  FCS and pads short frames. It also removes them on receive, and marks a bad frame
  by raising `mac_rx_err` with the frame's last beat.
- `mac_rx_*` has no ready signal. A real MAC cannot be held off, so every
  receive path starts with a buffer that drops whole frames when it is full.
- Reset is asynchronous and active low (`rst_n`). All control registers reset to 0,
  so nothing is sent until software enables it.

## Frames as built

Each frame is a 42-byte header followed by the payload: Ethernet (14 bytes), IPv4
without options (20 bytes) and UDP (8 bytes).

- **Ethernet.** The destination MAC comes from the ARP cache, indexed by the low byte
  of the destination IP. The source MAC comes from the registers. The Ethertype is
  0x0800.
- **IPv4.** Version 4 with IHL 5, and the total length. The identification field counts
  packets. DF is set and the TTL is 64. The protocol is UDP (17). The header checksum
  is computed in the framer, and the addresses come from the registers.
- **UDP.** The source and destination ports come from port pair A or B, chosen per
  packet. The length field is set. The checksum is 0, which IPv4 allows.

Two port pairs exist so that two kinds of packet can be interleaved, and a server can
steer each kind to its own queue pair and GPU.

## The framer: building a header after the payload

The IP and UDP length fields sit in the header, but a stream does not announce its
length. The framer therefore cannot emit the header before it has seen `tlast`.
Buffering a whole packet first and then copying it would cost a second pass. Instead,
the framer writes the frame straight into its final place in a TX ring slot, and
leaves beat 0 for last:

- Payload byte j belongs at frame byte 42 + j. Frame beat k (k ≥ 1) is therefore the
  top 42 bytes of payload beat k−1 followed by the low 86 bytes of payload beat k. The
  framer keeps the top 42 bytes of each beat in a register and writes frame beat k in
  the cycle payload beat k arrives.
- The low 86 bytes of payload beat 0 are also held back.
- In the cycle after `tlast` the framer knows the length. It builds the header,
  computes the checksum, and writes beat 0 (header plus the held 86 bytes). Beat 0
  goes through the ring's separate header port, because the ring keeps beat 0 of every
  slot in its own register bank. If the last payload beat had more than 86 bytes, a
  spill beat with its top bytes is written in the same cycle through the normal port.
- The slot is then committed with the beat count and the byte count of the last beat.
  Only a committed frame is visible to the reader, so the MAC never sees a frame
  whose header is still missing.

Each packet costs one extra cycle. An 8192-byte payload (64 beats) takes 65 cycles,
which is 8192·8 bit / (65 × 2.56 ns) = 393.8 Gb/s of payload. The top-level testbench
measures this number.

`s_ready` of the framer is low while no ring slot is free, while `tx_en` is clear, and
during the one closing cycle. The `stall` output counts these cycles into a statistic.

## Ring buffers

`pkt_ring_buffer` holds NSLOTS slots of SLOT_BEATS beats. The defaults are 8 × 128
beats, so each slot has room for a 16 KiB frame.

- **Write side.** The writer fills the head slot at any beat index, with 32-bit word
  enables so the CPU path can write it word by word. It then commits the slot, and the
  head moves on.
- **Read side.** A one-register output stage sends one beat per clock with correct
  `tkeep` and `tlast`, and honours `m_ready`. A slot is released when its last beat
  moves into the output register.

`rx_ring_buffer` wraps the ring for the receive side. A frame is written only if a
slot was free at its first beat. It is committed only if it fits the slot and
`mac_rx_err` was not set on its last beat. Otherwise the slot is simply not committed,
and it is reused. The drop is reported as overflow or as error.

## Receive filtering

`rx_filter` reads whole frames from an RX ring and decides on the first beat, which
holds the complete header. A *stream match* is a frame that meets all of these:

- the destination MAC is this node's;
- the Ethertype is IPv4 and the IHL is 5;
- the protocol is UDP;
- the destination IP is this node's;
- the destination port is `rx_port`.

The filter has two modes:

- **Streaming mode** (`STREAM=1`). Stream matches are passed with the 42 header bytes
  removed and are cut to the UDP length, which removes the MAC's padding. Output
  beat k is bytes 42..127 of frame beat k followed by bytes 0..41 of frame beat k+1.
  This is the framer's shift in reverse. One extra output beat may follow the last,
  and the input is held for it.
- **CPU mode** (`STREAM=0`). Frames to this MAC or to broadcast that are *not* stream
  matches are passed unchanged. This is what the CPU needs for ARP and ICMP.

Both filters see every received frame. Anything else is read and dropped, with one
pulse on `dropped`.

## CPU data path

The microcontroller reaches this path through its own AXI4-Lite port:

| Address | Access | Meaning |
|---|---|---|
| 0x0000–0x07FF | W | TX frame; word w = bytes 4w..4w+3, byte 4w in bits [7:0] |
| 0x0800–0x0FFF | R | RX frame, same layout |
| 0x1000 | W | TX_SEND: commit an n-byte frame (n written) |
| 0x1000 | R | bit 0 = a TX slot is free |
| 0x1004 | R | RX_STATUS: bit 31 = frame waiting, [15:0] = length in bytes |
| 0x1004 | W | release the RX frame |

TX words go straight into a small ring (4 slots of 2 KiB), so a frame of up to 2048
bytes is written once and then committed. Received frames pass through a 4-slot RX
ring and the CPU-mode filter into a one-frame buffer. While that buffer is full, the
filter waits and the ring fills, then drops.

## Arbitration towards the MAC

`tx_arbiter` takes whole frames from the streaming path and the CPU path in turn,
alternating when both wait, and passes them into a 16-beat FIFO that feeds `mac_tx_*`.
A grant holds until `tlast`, so frames are never interleaved. The CPU path therefore
gets at most one frame's worth of the link between two streaming frames.

## Control registers (`regs_axil_*`)

| Addr | Name | Content |
|---|---|---|
| 0x000 | CTRL | [0] tx_en, [1] gen_en, [2] gen_alt, [3] rx_en |
| 0x004/0x008 | SRC_MAC | low 32 bits / high 16 bits of this node's MAC |
| 0x00C | SRC_IP | this node's IP (also the receive match) |
| 0x010 | DST_IP | destination IP; its low byte indexes the ARP cache |
| 0x014 | PORTS_A | [31:16] source, [15:0] destination port of pair A |
| 0x018 | PORTS_B | the same for pair B |
| 0x01C | RX_PORT | UDP port accepted by the streaming filter |
| 0x020 | GEN_LEN | generator payload bytes per packet (≥ 2) |
| 0x024 | GEN_GAP | idle cycles after each generated packet |
| 0x028 | GEN_COUNT | packets to generate, 0 = endless |
| 0x040 + 4i | STAT[i] | read-only wrapping counters (listed below) |
| 0x800 + 8i | ARP[i] | word 0 = MAC[31:0], word 1 = MAC[47:32] |

The statistics counters are, in order:

- TX frames and RX frames;
- frames passed by the stream filter;
- frames dropped by the stream filter or for an error;
- RX ring overflows (both paths);
- framer stall cycles;
- CPU frames sent and CPU frames received;
- generated packets.

## Test packet generator

`pkt_gen` measures the link with no user logic attached. While `gen_en` is set it
replaces the user stream at the framer's input, and `s_tx_ready` stays low.

- **Packet content.** It sends packets of `GEN_LEN` bytes. The first two bytes carry a
  16-bit sequence number, most significant byte first, so a receiver can count lost
  packets. Byte i of beat b carries {b[0], i[6:0]} XOR the low sequence byte, so a
  misplaced byte or a stale packet shows up.
- **Rate.** After each packet it waits `GEN_GAP` cycles. An n-beat packet then
  occupies n + 1 + gap cycles, which sets the rate in steps of one cycle. With 8192-byte
  packets, a gap of 5 gives about 366 Gb/s.
- **Two kinds of packet.** With `gen_alt`, packets alternate between port pairs A and
  B. This produces two interleaved flows with different ports.
- **Restart.** Clearing `gen_en` stops after the current packet and restarts the
  counter.

## Relation to the published design and its limits

Taken from the published design:

- the split into a streaming data module and a CPU data module that share registers,
  the ARP cache and the MAC through an arbitration module;
- a framer that takes MAC, IP and ports from registers and the ARP cache, and writes
  into a TX ring buffer;
- an RX ring buffer followed by a filter on MAC, IP and port;
- control and statistics on an AXI4 bus;
- the 1024-bit bus at 390.625 MHz;
- a generator with a 16-bit loss counter, an adjustable rate, and two kinds of packet
  that differ in their ports.

This design's own choices, since the description stops at block level:

- **Internals.** The in-place framer, the slot-based rings with a separate header bank,
  and the filter rules with header stripping.
- **Interfaces.** The CPU memory map and the register map, and AXI4-Lite rather than
  full AXI4.
- **Sizes.** All buffer sizes, 256 ARP entries, and indexing the ARP cache by the low
  byte of the destination IP.

Not included:

- the MAC/PCS/FEC hard block and the transceivers;
- the microcontroller and its software, such as ARP replies.

Other limits:

- No VLANs, no IP options, and no UDP checksum (it is sent as 0 and ignored on
  receive).
- No IP fragmentation: a datagram must fit one frame and one ring slot.
- The receive side accepts one UDP port for the stream.
- The whole core is one clock domain. The MAC's AXI-Stream clock is assumed to be the
  core clock.

## Verification

Each block has a self-checking testbench in `tb/`, and the package has one for its
header builder and checksum (`tb_eth400g_pkg`, including a published IPv4
known-answer header). Each one compares against
reference values that the testbench computes itself: headers, checksums, payloads,
counts. Each ends by printing `TB_RESULT checks=<n> failures=<m>`, and each has a
cycle watchdog. Shared helpers:

- `tb/tb_eth_util.sv`: a reference frame builder;
- `tb/axil_bfm.sv`: an AXI4-Lite bus-functional model that plays the microcontroller;
- `tb/dcmac_loopback_model.sv`: a behavioural stand-in for the MAC. It loops TX back
  to RX after a latency, can stall TX, and can mark a frame bad.

`tb_eth400g_top` runs the core with every parameter at its default. It covers:

- user packets on both port pairs;
- CPU broadcast frames competing with streaming frames in the arbiter;
- MAC back-pressure;
- a frame with a bad FCS;
- 30 generated 8192-byte packets, checking that the payload rate exceeds 380 Gb/s;
- alternating A/B packets with the receiver stopped, so the RX ring overflows and the
  sequence numbers show the gaps.

It counts each mechanism and fails if any of them never happened: framer stall,
arbitration contention, spill beat, filter flush beat, filter drop, ring overflow,
FCS drop, CPU transmit and CPU receive. It also checks the statistics counters
against its own counts. The run takes well under a minute.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps -y rtl -y tb +libext+.sv \
    rtl/eth400g_pkg.sv tb/tb_eth_util.sv tb/tb_eth400g_top.sv \
    --top-module tb_eth400g_top -o sim
./obj_dir/sim
```

Replace the testbench name to run another block's test. Lint warnings that remain are
about unused bits of the wide beat structs and outputs left open on purpose, such as
ring fill levels, and about `rst_n` being used both as an asynchronous reset
and in the `disable iff` of the handshake assertions.
