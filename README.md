# A synchronous Gigabit Ethernet UDP/IP stack in SystemVerilog

This core sends a continuous stream of application data as UDP datagrams over Gigabit Ethernet at
line rate. Every layer of the stack (MAC, Ethernet, IP, UDP, plus ARP, ICMP and a PTP time base)
runs in a single 125 MHz clock domain, the GMII transmit clock. The one exception is the
application's write port. Layers do not buffer frames from one another. Instead, the lowest busy
layer *pulls* each byte from the layer above at the moment it needs it, so each layer boundary
costs exactly one register. The result is a fixed latency from the application FIFO to the wire,
and back-to-back frames separated by nothing but the 12-cycle interframe gap. A small
microcontroller does the slow control over a register bus:
- it answers Ping;
- it reads received UDP datagrams;
- it sends its own UDP datagrams;
- it talks to the PHY over MDIO;
- it runs the PTP servo.

## Block structure

```
 app_clk domain │                      125 MHz domain
 app_wr_en/data ─► udp_payload_fifo ─► udp_tx (app)  ─┐
 bus (uC FIFO)  ─► udp_payload_fifo ─► udp_tx (uC)   ─┤ layer_arbiter ─► ip_tx ─┐
                                       icmp (tx)     ─┘  (ICMP first)           │ layer_arbiter ─► eth_tx ─► mac_tx ─► GMII TX
                                       arp (tx)      ──────────────────────────-┘  (ARP first)
 GMII RX ─► mac_rx ─► eth_rx ─┬► arp
                              └► ip_rx ─┬► icmp (rx buffer) ─► bus
                                        └► udp_rx (rx buffer) ─► bus
 ptp_clock (time, SFD timestamps, PPS)   mdio_master   bus_regs (register map)
```

The top is `gige_core`. Outside it are the microcontroller (bus ports), the PHY (GMII, MDC/MDIO),
the clock PLL (`clk` input) and the application (`app_*` FIFO write port).

## The Data-Pull interconnect

This is the part that makes the design unusual. Read it before changing any transmit block.

Each transmit layer has two faces, an upper one and a lower one.

**Upper face.** A layer offers a frame to the layer below by raising `avail`. Together with it,
the layer presents a `tx_meta_t` descriptor: total length, EtherType, destination MAC, IP
protocol and destination IP. It does not send anything yet.

**Lower face.** When the lower layer decides to send, it does two things:
- it asserts `lock` for the whole frame;
- at the right byte, it gives a one-cycle `start` pulse.

From the cycle after `start`, the upper layer drives `tx_data_t` (`en`, `d`), one byte per clock,
for exactly the length it announced.

The lower layer registers that byte once and places it into its own byte stream. So each layer
boundary adds one cycle of delay, and no layer ever holds more than one byte of another layer's
data. Because of this, the lower layer must fire `start` exactly two cycles before the slot where
the first upper byte must appear on its own output:
- `eth_tx` fires at header byte 12, so the IP header follows the 14-byte Ethernet header with no
  gap;
- `ip_tx` fires at header byte 18;
- `udp_tx` sends its 8-byte header itself and then reads the payload FIFO.

Data reaches the MAC two clocks after the UDP layer drives it, one register per layer crossed.
The testbenches check this alignment byte by byte. An off-by-one shows up as a corrupted frame.

`layer_arbiter` connects N upper modules to one lower one. It contains three parts:

- **Arbiter.** It picks by fixed priority, index 0 first, among the modules with `avail`. It holds
  the grant register unchanged while the lower layer's `lock` is high, so the choice cannot change
  in the middle of a frame. An assertion checks this.
- **Control demultiplexer.** It routes the single `start` pulse to the granted module only.
- **Data multiplexer.** It selects the granted module's descriptor and byte stream.

The top uses two arbiters:
- Ethernet level: ARP, then IP.
- IP level: ICMP, then the microcontroller's UDP channel, then the application's UDP channel.

So a Ping reply goes out between two stream packets even while the application keeps the link
fully loaded. This fixed-priority scheme lets a higher-priority source starve a lower one; that is
intended for the slow-control sources, which send rarely.

A layer may only raise `avail` when it can then send its whole frame without waiting. It has no
way to stall once pulled. This is why the UDP channels sit behind `udp_payload_fifo`:
- its `pkt_empty` output only goes low when a complete payload is stored;
- it has already worked out the payload's one's-complement sum while the data was written.

`udp_tx` can therefore put the correct checksum into the header before the first payload byte
exists on its side of the FIFO.

## MAC

`mac_tx` receives the Ethernet frame without FCS, as a `tx_en`/`txd` byte stream. It works as
follows:
- An 8-byte shift register starts out holding the preamble (7×0x55) and SFD (0xD5). The frame
  bytes enter behind it, so the first frame byte appears on GMII 9 clocks after `tx_en` rises.
- Frames shorter than 60 bytes are padded with 0xAA.
- The byte-wise CRC-32 unit (`crc32_alu`) computes the FCS, which is appended least significant
  byte first.
- A gap counter keeps `phy_txen` low for `ifg_cycles` clocks, 12 after reset.
- `tx_busy` is high from the first byte until the gap has passed; `eth_tx` waits for it.

One 1472-byte UDP payload therefore occupies 1526 + 12 = 1538 clocks. That is 114.1 MiB/s of
payload, the theoretical limit for a 1500-byte MTU.

`mac_rx` is the mirror image:
- it finds the SFD;
- it holds four bytes back, so the FCS is never passed on;
- it streams the frame as `rx_stream_t` (`sof`, `valid`, `data`, then an `eof` cycle carrying
  `ok`).

`ok` means:
- the CRC register ended at the residue 0xDEBB20E3;
- `rx_er` was never seen;
- the frame was at least 64 bytes long.

Receive layers (`eth_rx`, `ip_rx`, `arp`, `icmp`, `udp_rx`) work on the fly. They strip their
header, check their fields, and forward the payload with the AND of all checks at `eof`. Only the
two stores at the end keep data:
- the ICMP buffer;
- the UDP receive buffer.

Each store holds one message until the microcontroller releases it.

## Other layers

- **`arp`.** It answers requests for the own IP in hardware. It holds one pending reply. It does
  not send requests and keeps no cache: IP frames always go to the configured next-hop MAC.
- **`icmp`.** It keeps one received message for the microcontroller, and raises `irq`. The
  processor writes the reply into a transmit buffer with the checksum bytes zero. The block
  computes and inserts the checksum while sending.
- **`udp_rx`.** It accepts datagrams to one port and stores one payload of up to 2048 bytes. It
  does not verify the UDP checksum.
- **`ptp_clock`.** A 64-bit nanosecond counter steps by 8 every clock. The processor can load it
  and slew it by a signed amount. The counter also does two more things:
  - It captures timestamps at the transmit and receive SFD.
  - It outputs a PPS signal with period 2^PPS_BIT ns. The default PPS_BIT = 28 gives 268.4 ms.

  The PTP message exchange itself is left to software.
- **`mdio_master`.** Clause-22 read/write frames, with MDC at clk/50.
- **`bus_regs`.** The register map, listed in the file header. The reset values are:

  | Field | Value |
  |---|---|
  | own MAC | 40:D8:55:05:50:05 |
  | own IP | 192.168.0.15 |
  | host MAC | 00:40:9E:03:68:C5 |
  | host IP | 192.168.0.1 |
  | UDP ports | 1025 → 1024 |
  | interframe gap | 12 |

  With these values the core streams to a host as soon as it leaves reset.

## Parameters and sizes

| Parameter | Default | Meaning |
|---|---|---|
| `PAYLOAD_BYTES` | 1472 | UDP payload per packet, a multiple of 4. Use 8972 for jumbo frames. |
| `FIFO_WORDS` | 1024 | 32-bit words per channel FIFO. It must hold at least two payloads. |
| `PPS_BIT` | 28 | PPS period 2^PPS_BIT ns |

At the defaults, a 1472-byte stream fits twice into the FIFO (736 of 1024 words). An 8972-byte
jumbo payload does not fit. For jumbo frames, set `PAYLOAD_BYTES=8972` and `FIFO_WORDS=8192`.

## Where this departs from, or goes beyond, the description it follows

- **Padding.** It is done in the MAC. One waveform of the original description shows the upper
  layer's enable covering the padding bytes, while its caption puts padding in the MAC. The
  caption was followed.
- **ARP replies.** They are generated in hardware, not by the processor.
- **Not specified by the source, so chosen here:**
  - the microcontroller bus and its register map;
  - the UDP checksum precomputation;
  - the priorities other than ICMP-first;
  - the IP identification (0xA5A5) and TTL (64);
  - all receive-side filtering rules.
- **PTP.** Only the time base, timestamps and PPS exist in hardware. The PTP layer's own message
  handling is not described in enough detail to build it.
- **Not included.** The microcontroller, the PHYs and transceivers, and the PLL are outside the
  core.

## Simulation

Every block has a self-checking testbench in `tb/` that prints `TB_RESULT checks=N failures=M`.
Shared frame builders (CRC, checksums, headers, ARP/ICMP/UDP frames) live in `tb/tb_util_pkg.sv`.
For example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/gige_pkg.sv tb/tb_util_pkg.sv tb/tb_gige_core.sv --top-module tb_gige_core -o sim
./obj_dir/sim
```

The two testbenches for the whole core are:

- **`tb_gige_core`.** It runs the core with a 12-byte payload. Its first packet reproduces the
  frame printed in the original waveform, FCS 12 BE 6D E5. It then checks, and counts:
  - a 20-packet stream with 12-cycle gaps;
  - an ARP exchange;
  - a Ping answered by a processor model while the stream runs, with ICMP priority;
  - a UDP datagram read over the bus;
  - the processor's UDP channel;
  - a dropped bad-FCS frame;
  - an MDIO write;
  - a PTP timestamp;
  - PPS pulses.
- **`tb_gige_full`.** It runs the core at its default parameters. It sends four 1472-byte
  payloads and checks every byte of the four 1526-byte packets. It also checks the 12-cycle gaps
  and the 1538-cycle packet period.
