# NetGBT: an lpGBT to 10 Gigabit Ethernet media converter in SystemVerilog

Detector front ends send their data over lpGBT optical links: radiation-hard,
low-power uplinks that run at 10.24 Gbps and deliver, after forward error
correction (FEC5), a 224-bit user word on every 40 MHz bunch clock, i.e.
8.96 Gbps of payload per link. Traditional readout boards take many such links
into one large FPGA and push the data into a server over PCI Express. NetGBT
takes a different approach. It converts each lpGBT link, one to one, into a
10 Gigabit Ethernet link that carries UDP-Lite datagrams. The converter can
then be a small, cheap FPGA. Everything downstream is standard network gear: a
NIC for a bench setup, or commodity switches that aggregate many converters in
a large system.

This repository is RTL for the conversion datapath as the NetGBT proof of
concept describes it (A. Perro, M. Vodnik, P. Durante, "A Low-Cost, Low-Power
Media Converter Solution for Next-Generation Detector Readout Systems"). That
proof of concept has four lpGBT links in and four 10GbE links out. The
publication describes the datapath block by block but does not give its
internals. The internals here are this implementation's own. The sections
below say which parts follow the description and which are choices made here.

## The datapath

One channel per lpGBT link (`netgbt_link`), four channels in the top level
(`netgbt_top`):

```
 lpGBT-FPGA decoder            |  Ethernet clock, 156.25 MHz
 224 bit @ 40 MHz              |
      |                        |
      v                        |
 +-------------------- lpgbt_cdc_fifo ---------------------+
 | async_fifo (224 bit words, Gray pointers) -> gearbox    |
 |                                 224 -> 64 bit           |
 +---------------------------------------------------------+
                                       | 64 bit words, "avail" count
                                       v
                                  packetizer   (N words per packet, N from a register)
                                       | 64 bit packet + length
                                       v
                                  udplite_tx   (Ethernet + IPv4 + UDP-Lite header)
                                       | 64 bit AXI-Stream, tkeep, tlast
                                       v
                           10G Ethernet MAC/PCS (outside this RTL)

 netgbt_regs: enable, packet size, MAC/IP addresses, UDP ports, counters
```

Nothing flows back to the lpGBT side. A front end cannot be paused, so the
converter must keep up on average and absorb short stalls of the MAC in its
FIFO. If the FIFO does overflow, whole 224-bit words are dropped and counted.

## Why the rates work out

| quantity | value |
|---|---|
| lpGBT payload | 224 bit x 40 MHz = 8.96 Gbps |
| stream to the MAC | 64 bit x 156.25 MHz = 10 Gbps |
| cost of a packet of N 64-bit words | N + 7 cycles (5 header beats, 1 tail beat, 1 idle cycle) |
| payload capacity | N / (N + 7) x 10 Gbps |

The stream keeps up with a full lpGBT link only when N / (N + 7) x 10 >= 8.96,
that is, for payloads of at least 61 words (488 bytes). With smaller payloads
the FIFO fills and words are lost. Large packets are therefore essential. The
published measurements settled on 4 kB as the smallest packet size to use, so
the reset value here is 4096 bytes (512 words). Such a packet leaves in
519 cycles (3.32 us), while its data takes 3.66 us to arrive.

The published throughput measurement peaked at 3584-byte packets, with
(9064 +- 2) Mbps at (312,490 +- 54) packets/s. Those figures agree with this
datapath:

- 8.96 Gbps / (3584 B x 8) = 312,500 packets/s.
- Each frame without its FCS is 3584 + 42 = 3626 bytes, so 312,500 x 3626 x 8 = 9.065 Gbps.

So the "packet size" of the measurements is the UDP-Lite payload, and that is
how `PKT_WORDS` is defined here. The sweep testbench reproduces both numbers.

The MAC adds 24 bytes per frame (FCS, preamble and inter-frame gap), which
this RTL does not model. At 4096 bytes the line then needs 4162 x 0.8 ns =
3.33 us per packet, still inside the 3.66 us budget. At very small payloads a
real MAC would hold `tready` low for those extra bytes, and the channel's
capacity is then lower than the table above gives.

## The mixed-width FIFO (`lpgbt_cdc_fifo`)

This block does two jobs. It moves data from the lpGBT clock to the Ethernet
clock, and it turns 224-bit words into 64-bit words. Because 224 is not a
multiple of 64, the two jobs are split:

1. **Clock crossing, `async_fifo`.** A standard dual-clock FIFO of whole
   224-bit words, 512 deep. Both pointers are one bit wider than the address
   and are kept in binary and in Gray code. Each Gray pointer crosses into the
   other domain through a two-flop synchronizer (`sync_ff`). As a result, full
   and empty can only be late, never early. The memory has one registered
   read port, as block RAM does. An output register in front of it makes the
   read side first-word-fall-through: the oldest word is always shown, and
   the next one is fetched in the same cycle as the current one is taken.
2. **Width conversion, `gearbox_224_64`, in the Ethernet clock domain.** The
   gearbox holds up to nine 32-bit lanes (288 bits). An incoming word adds
   seven lanes above those already held, and each output beat takes the two
   lowest lanes. A word is loaded in the same cycle as a beat leaves whenever
   it fits (at most two lanes left after the beat). In the steady state this
   gives one 64-bit beat every cycle, and two input words make exactly seven
   beats. Bits leave in order: bits [63:0] of a word form its first beat, so
   byte 0 of a word is bits [7:0].

The FIFO also tells the packetizer how many 64-bit words can be read without
a gap:

```
avail = (words_in_fifo * 7 + lanes_in_gearbox) / 2
```

`words_in_fifo` is the read side's view, output register included, which
lags the writer by the synchronizer delay. `avail` therefore never claims
words that are not yet there.

**Write side.** `lpgbt_valid` writes a word. Writes happen only while the
link is enabled. The enable bit comes from the register file and reaches the
lpGBT clock through a synchronizer, so it takes effect two lpGBT cycles late.
A word that arrives while the FIFO is full is dropped. The drop counter counts
in the lpGBT domain, is kept in Gray code, and is synchronized into the
Ethernet domain, where it is readable as `DROP_COUNT`.

Depth: 512 x 224 bits is 14,336 bytes. That is more than the largest jumbo
payload (8968 bytes), so any legal packet size can be started. It is also
enough to ride out about 12.8 us of MAC stall at the full lpGBT rate. The
output register and the gearbox hold one more word each. A 512 x 224 memory
is about four 36-kbit block RAMs per channel. The published resource figures
(34 block RAMs and only 298 LUTs used as RAM for four links) suggest that the
original FIFO is in block RAM too.

## Packet formation (`packetizer`)

The packetizer cuts the word stream into packets of `PKT_WORDS` words. It
starts a packet only when `avail >= PKT_WORDS`, so once a packet has started,
every word of it is already in the FIFO. The frame then reaches the MAC with
no idle cycle inside it, which the MAC's AXI-Stream interface requires. An
assertion (`ap_no_underrun`) guards this. The packet length is latched at the
start of the packet and passed to the header inserter on `m_len`, because the
IP and UDP length fields are sent before the payload. A length of 0 is sent
as 1 word. Lengths above 1121 words (the 8968-byte payload of a 9000-byte
MTU) are cut to 1121. When the link is disabled, a packet already started
still completes.

## The headers (`udplite_tx`)

Each frame is a 42-byte header followed by the payload. Byte 0 of a beat is
`tdata[7:0]`. Multi-byte fields are sent most significant byte first.

| bytes | field | value |
|---|---|---|
| 0-5 | destination MAC | register |
| 6-11 | source MAC | register |
| 12-13 | EtherType | 0x0800 (IPv4) |
| 14-15 | version/IHL, TOS | 0x45, 0x00 |
| 16-17 | IPv4 total length | 20 + 8 + 8N |
| 18-19 | identification | packet counter, from 0 |
| 20-21 | flags/fragment | 0x4000 (don't fragment) |
| 22-23 | TTL, protocol | 64, 136 (UDP-Lite) |
| 24-25 | IPv4 header checksum | computed |
| 26-33 | source, destination IP | registers |
| 34-37 | source, destination port | register |
| 38-39 | UDP-Lite checksum coverage | 8 |
| 40-41 | UDP-Lite checksum | computed |

UDP-Lite is UDP with a checksum that may cover only part of the datagram.
Here the coverage is 8 bytes: the checksum protects the pseudo header (the IP
addresses, the protocol and the length) and the UDP-Lite header, but not the
payload. Both checksums therefore depend only on header fields. They are
computed in one cycle when a packet begins, and the payload is never read
twice or buffered. The receiver still gets an IP-level integrity check on
addressing, and the payload relies on the Ethernet FCS. Protecting the payload
is left to the data format of the front end.

42 bytes is five 64-bit beats plus two bytes, so the payload leaves shifted by
two bytes. Beat 5 carries header bytes 40-41 and payload bytes 0-5. Each later
beat carries the last two bytes of the previous input word and the first six
of the current one. A final beat with `tkeep = 8'h03` carries the last two
bytes. A packet of N words thus leaves as N + 6 back-to-back beats.

## Registers (`netgbt_regs`)

Each channel has its own register file on a simple bus in the Ethernet clock
domain: word address, 32-bit data, write strobe, combinational read. In
`netgbt_top`, `reg_addr[9:8]` selects the channel and `reg_addr[7:0]` selects
the register. The published system reaches these registers from a JTAG debug
core and from a soft microcontroller that speaks MQTT over a 1 GbE management
link. Neither is part of this RTL, and any bridge or clock crossing to this
bus is left to the integrator.

| address | name | access | contents |
|---|---|---|---|
| 0x00 | CTRL | rw | [0] enable (reset 0) |
| 0x01 | PKT_WORDS | rw | [10:0] payload length in 64-bit words (reset 512) |
| 0x02/0x03 | SRC_MAC_LO/HI | rw | MAC bits 31:0 / 47:32 |
| 0x04/0x05 | DST_MAC_LO/HI | rw | MAC bits 31:0 / 47:32 |
| 0x06 | SRC_IP | rw | IPv4 source address |
| 0x07 | DST_IP | rw | IPv4 destination address |
| 0x08 | PORTS | rw | [31:16] source port, [15:0] destination port |
| 0x10 | PKT_COUNT | ro | packets sent |
| 0x11 | DROP_COUNT | ro | lpGBT words lost to a full FIFO |

The reset addresses (02:00:00:00:00:01 to 02:00:00:00:00:FE, 192.168.1.10 to
192.168.1.1, ports 50000) are placeholders that software is expected to
overwrite.

## What is outside the RTL

These parts of the system are vendor IP, external cores or software. Their
connections are ports of `netgbt_top`:

- **GTY transceivers and the lpGBT-FPGA core** (FEC5, 10.24 Gbps). They drive
  `lpgbt_clk[i]`, `lpgbt_rst_n[i]`, `lpgbt_valid[i]` and `lpgbt_data[i]`
  (224 bits).
- **The 10G Ethernet MAC and PCS.** It takes `m_axis_*[i]` (64-bit
  AXI-Stream with `tkeep`) and provides `clk` (156.25 MHz) and `rst_n`.
- **The JTAG debug core, the soft microcontroller with its MQTT client and
  the 1 GbE management link.** These drive `reg_*`.

Also outside the RTL: the front-end emulators used to test the system, the
front-end-specific data processing whose FPGA cost was estimated (calorimeter
formatting, VELO clustering, a FastRICH decoder), and the planned 48-link
version with 100GbE uplinks. They are not described in enough detail to build.

## Choices made here, not in the published description

- The 64-bit read width, the 512-word FIFO depth, and dropping whole words
  when the FIFO is full.
- The split of the FIFO into a word-wide asynchronous FIFO plus a gearbox,
  and the byte order inside a 224-bit word.
- Starting a packet only when all of it is buffered. Packet length as a
  run-time register in whole 64-bit words.
- All IPv4 field values, UDP-Lite checksum coverage 8, and the AXI-Stream
  beat layout.
- The register map, its reset values and its bus.
- One shared Ethernet clock for all four channels. Asynchronous active-low
  resets, one per clock domain, asserted together.
- The published gateware builds its datapath from an open-source common core
  library. That library's cores are not described, so everything here is
  written from scratch.

## Verification

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`.

| testbench | what it shows |
|---|---|
| `tb_lpgbt_cdc_fifo` | Every output word matches a lane-level reference model. There are no losses at the full lpGBT rate with a reader that stalls one cycle in sixteen. Overflow gives the exact drop count and `avail` value. Writes are ignored while disabled. |
| `tb_packetizer` | No packet starts before all of its words are buffered. Packets keep order and `tlast`, move one word per cycle, survive random stalls, and clamp their lengths. |
| `tb_udplite_tx` | Frames are compared byte for byte with frames built independently, including both checksums. A frame takes N + 6 cycles. |
| `tb_netgbt_regs` | Reset values, read-back, field placement, read-only counters, unmapped addresses. |
| `tb_netgbt_link` | One channel end to end at default size: full rate without loss, MAC stalls, FIFO overflow (data gaps equal `DROP_COUNT`), 3584-byte packets, disable/enable. |
| `tb_netgbt_top` | All four channels at default parameters, each on its own slightly different lpGBT clock. Per-channel configuration through the shared bus, with overflow, back-pressure, packet-size change and disable happening at the same time. Each must be seen at least once. |
| `tb_packet_size_sweep` | Throughput against payload size (56 to 8960 bytes) at the full lpGBT rate. At 3584 bytes it gives 312,500 packets/s and 9.065 Gbps. |

`tb_frame_checker` and `tb_lpgbt_source` are shared testbench parts. The
source builds each 224-bit word from seven lanes `{link, index*8 + lane}`.
The checker verifies every header field and checksum of every frame, joins
the payloads, cuts them back into 28-byte words, and checks that every lane
is intact and that no word is lost except those reported as dropped.

Sweep results (MAC never stalling, MAC overhead not modelled):

| payload (bytes) | 56 | 112 | 224 | 448 | 896 | 1792 | 3584 | 7168 | 8960 |
|---|---|---|---|---|---|---|---|---|---|
| payload rate (Gbps) | 5.00 | 6.67 | 8.00 | 8.89 | 8.96 | 8.96 | 8.96 | 8.96 | 8.96 |
| words dropped | yes | yes | yes | not within 200 us | 0 | 0 | 0 | 0 | 0 |

To run a testbench with Verilator 5 (the package first, with both folders on
the include path):

```
verilator --binary --timing --assert -Irtl -Itb rtl/netgbt_pkg.sv \
    tb/tb_netgbt_top.sv --top-module tb_netgbt_top
./obj_dir/Vtb_netgbt_top
```

Any other testbench runs the same way, with its name in place of
`tb_netgbt_top`. All runs take well under a second.

## Files

- `rtl/netgbt_pkg.sv`: widths, header constants, the configuration struct, Gray code and checksum functions.
- `rtl/netgbt_top.sv`: four channels and the shared register bus.
- `rtl/netgbt_link.sv`: one channel.
- `rtl/lpgbt_cdc_fifo.sv`, `rtl/async_fifo.sv`, `rtl/gearbox_224_64.sv`, `rtl/sync_ff.sv`: the mixed-width FIFO.
- `rtl/packetizer.sv`, `rtl/udplite_tx.sv`, `rtl/netgbt_regs.sv`.
- `tb/`: the testbenches above.

Verilator's lint reports `SYNCASYNCNET` on the resets. The asynchronous resets
are also sampled by the `disable iff` clauses of the assertions, which
Verilator flags. The warning has no effect on the logic.
