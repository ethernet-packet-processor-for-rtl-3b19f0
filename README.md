# Ethernet packet processor (EPP): receive-side RTL

A switch or router spends much of its processor time on the same few chores
for every Ethernet frame it receives: finding where the frame starts, checking
the gap to the previous frame, counting the frame's length, pulling out the MAC
addresses, working out what protocol the frame carries and where the IP header
and the TCP/UDP ports are, and checking the CRC. The packet processor described
here does all of that in hardware, at line rate, between the PHY chip and the
host processor. The host gets the frame bytes plus, two clocks after the
last byte, a single *descriptor* holding every field it needs for its address
look-up, with the validity flags already worked out.

The design follows a published block diagram of such a processor (blocks SFD,
IFG, Frame Count, SRC MAC, DST MAC, L2 and L3 inside an FPGA, fed by a
10/100/1000 PHY), which names the blocks and their functions but not their
internals. Everything inside the blocks, the internal bus, the descriptor and
the PHY interface is this design's own. The sections below say which is which.

## Where it sits

```
 RJ45 -- PHY --(MII/GMII)--> epp_rx_if --> epp_sfd_detect ==== frame bus ====+==> frame_out (to host buffer)
                                                 |                          |
                     +---------------+-----------+-----------+-------------+
                     |               |           |           |
               epp_ifg_detect   epp_mac_extract  epp_l2_parser  epp_crc_check
                     |                           |
               epp_frame_count              epp_l3_parser
                                                 |
                                            epp_l4_parser
                     \_____________ all results ____________/
                                        |
                              descriptor register (epp_top) ==> desc_valid / desc
```

In the application the source paper sketches, a LAN switch has twelve such
processors, each with its own PHY and RJ45 jack, around one processor core;
a router has one on the LAN side next to a WAN interface. `epp_top` is one
port. The processor core, PHY, connector and WAN interface are not part of this
RTL.

## The byte-time frame bus

The key to keeping every block simple is one internal bus, `epp_pkg::fbeat_t`,
that advances once per **byte time** rather than once per clock:

| field  | meaning |
|--------|---------|
| `tick` | one byte time has passed; runs during idle too |
| `pre`  | the carrier rose in this byte time (a preamble starts) |
| `valid`| `data` is a frame byte |
| `sof`, `eof` | first byte (destination MAC byte 0), last byte (last FCS byte) |
| `err`  | the PHY flagged `rx_er` on this byte |
| `idx`  | byte position in the frame, 0 = first destination MAC byte, saturates at 2047 |
| `data` | the byte |

At 1000 Mb/s the PHY delivers a byte per 125 MHz clock (GMII) and a byte time is
one clock. At 10 and 100 Mb/s it delivers a nibble per clock (MII, 2.5 or
25 MHz) and `epp_rx_if` pairs nibbles, low nibble first, so a byte time is two
clocks. Since the gap check counts `tick`s, the 96-bit minimum gap is the same
12 byte times at every speed, and no block below `epp_rx_if` knows which speed
is in use. `gmii_mode` selects the width; change it only while the line is
idle.

Because every field of an Ethernet/IP header sits at a known byte position,
each parser is a set of registers loaded when `idx` (relative to an offset)
hits the right value. Nothing stalls and nothing is buffered, so throughput is
one byte per byte time.

### Delineation and eof

`epp_sfd_detect` walks IDLE, PREAMBLE, FRAME. The preamble is the pattern
1010...1011 on the wire, 8 bytes including the start-of-frame delimiter, which
on a byte interface is seven `0x55` bytes and `0xD5`. Any number of `0x55`
bytes from `MIN_PREAMBLE` (1) up is accepted, because PHYs may eat part of the
preamble; the count is reported (`pre_len`, and `pre_ok` when it is the nominal
`PREAMBLE_BYTES` = 7). A carrier event that shows any other byte before the
SFD, or ends before it, is dropped whole and counted as a preamble error.

To mark the last byte with `eof` the block must know the carrier has dropped,
which it learns one byte time later. It therefore holds one byte back: the byte
received in byte time n goes onto the bus in byte time n+1, and the final byte
goes out, with `eof`, in the first idle byte time. That beat is also the first
byte time of the following gap.

### When results are ready

Every block updates its outputs in the clock after the bus beat that carries
the field, and keeps them until the next frame overwrites them. Each block's
results are therefore all final in the clock after the `eof` beat, and that is
when `epp_top` copies them into the descriptor. The next frame cannot start
earlier than that: its first byte needs at least an SFD byte time after the
carrier rises. In GMII mode, with edge n the clock edge that samples the last
byte from `rxd`:

| after edge | event |
|------------|-------|
| n   | byte in `epp_rx_if` |
| n+2 | byte on `frame_out` with `eof` |
| n+3 | frame counter, CRC and all parser results final (`done`) |
| n+4 | `desc_valid` high for one clock, `desc` valid until the next descriptor |

### Hand-offs between parsers

The L2, L3 and L4 parsers tap the same bus but need each other's results:

* `epp_l2_parser` decodes the length/type field (bytes 12-13). A value of
  0x0600 or more is an Ethernet II type and the layer-3 header starts at byte
  14. A value of 1500 or less is an IEEE 802.3 length: an LLC header follows,
  and if it reads AA-AA-03 a SNAP header carries the type at bytes 20-21 and
  layer 3 starts at byte 22; otherwise layer 3 starts at 17 with no type.
  Values 1501-1535 are invalid. It raises `l3_valid` the clock after the last
  byte that decides the offset (13, 16 or 21), which is always before the bus
  reaches that offset.
* `epp_l3_parser` parses IPv4 only (type 0x0800): header length, total length,
  TTL, protocol and both addresses, with `ipv4` set once byte +19 has been read.
  After byte +9 it tells the L4 parser where TCP/UDP starts
  (`l3_offset + 4*IHL`), but only for TCP or UDP and only for the first
  fragment, where the ports actually are.
* `epp_l4_parser` reads the two 16-bit port numbers.

## The blocks

| module | what it does | from the paper | this design's choice |
|--------|--------------|----------------|----------------------|
| `epp_rx_if` | MII/GMII to one byte per byte time | 10/100/1000 links, PHY chip | MII/GMII, nibble order, mode pin |
| `epp_sfd_detect` | preamble, SFD, frame bus | 8-byte preamble 1010...1011 | shortened preamble accepted, hold-back, bad-preamble drop |
| `epp_ifg_detect` | gap before each frame, flag below 96 bits | 96-bit gap | counting from last FCS byte to next preamble, in byte times |
| `epp_frame_count` | frame length, 64..1518 check, statistics | length count, frame format | which counters exist |
| `epp_mac_extract` | destination and source MAC | both fields | byte order, valid flags |
| `epp_l2_parser` | encapsulation, protocol type, L3 offset | "type of Ethernet encapsulation" | the set of encapsulations |
| `epp_l3_parser` | IPv4 header fields, IP addresses | L3 parsing, IP extraction | IPv4 only, the fields taken |
| `epp_l4_parser` | TCP/UDP ports | L4 parsing (named only) | ports only |
| `epp_crc_check` | CRC-32 check and calculated FCS | CRC calculation/detection, 32-bit FCS | residue check, byte-serial |
| `epp_top` | all of the above, descriptor, counters | block diagram | bus, descriptor |

### CRC

`epp_crc_check` runs the IEEE 802.3 CRC-32 (reflected polynomial 0xEDB88320,
initial value all ones) over every byte from the destination MAC to the last
FCS byte, eight unrolled bit steps per byte (`epp_pkg::crc32_byte`). Including
the received FCS, a good frame always leaves the register at 0xDEBB20E3, so
`crc_ok` needs no knowledge of where the data ends. For the host it also
reports the CRC over the frame without its FCS (`desc.fcs`, the value a
transmitter would have appended, computed from the register value three beats
back) and the received FCS (`desc.fcs_rx`, first received byte in bits 7:0).

### The descriptor

`epp_pkg::desc_t` holds, per frame: destination and source MAC; encapsulation,
raw length/type, protocol type; IPv4 flag, IHL, total length, TTL, protocol,
source and destination IP; TCP/UDP flag and ports; frame length with `len_ok`,
`runt`, `oversize`; `crc_ok`, calculated and received FCS; preamble length and
`pre_ok`; the gap before the frame and `ifg_ok`; and `rx_err` if the PHY
flagged an error anywhere in the frame. Fields that the frame does not carry
are zero. The processor does not drop anything: every frame delimited by an SFD
produces a descriptor, and the host decides from the flags what to discard
(a store-and-forward switch drops on `!crc_ok`, for example).

The counters on `epp_top` (`frames`, `runts`, `oversizes`, `ifg_errors`,
`crc_errors`, `preamble_errors`) are 32 bits and wrap.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `PREAMBLE_BYTES` | 7 | nominal 0x55 bytes before the SFD (8 bytes with SFD) |
| `MIN_PREAMBLE` | 1 | fewest 0x55 bytes accepted |
| `IFG_MIN_BYTES` | 12 | minimum gap, 96 bit times |
| `MIN_FRAME` | 64 | shortest valid frame, destination MAC to FCS |
| `MAX_FRAME` | 1518 | longest valid frame |

All defaults are the frame format's own numbers. One figure of the source
labels the frame "64 to 1584 bytes"; the field table beside it (46 to 1500 data
bytes) gives 1518, which is what Ethernet uses and what is built. The byte
index and length counters are wide enough for either.

## How far to trust it

* Verified in simulation only, not on hardware or in an FPGA, and not against
  captured traffic. Every block has its own self-checking testbench; the
  end-to-end testbench drives the PHY pins at both widths with Ethernet II,
  LLC, SNAP, invalid-type, TCP, UDP, fragmented, ARP, runt, oversize,
  CRC-error, receive-error, short-gap, short-preamble and bad-preamble frames,
  checks every descriptor against an independent software parse, checks the
  frame bytes, the counters, the descriptor latency, and 16 minimum-size
  frames at the minimum gap with none lost, followed by 160 randomly drawn
  frames in both modes.
* The testbenches' CRC reference is written differently from the RTL's
  (MSB-first, non-reflected, with explicit bit reversal).
* Not built: a transmit path (the source mentions CRC for transmitted frames
  but describes no transmit side), 802.1Q VLAN tags, IPv6, the IPv4 header
  checksum, MDIO/speed negotiation with the PHY, and everything on the host
  side (packet buffer, MAC look-up table, switching and routing).
* One clock domain: the host must sample `frame_out` and `desc` on the PHY
  receive clock, or synchronise them.
* The source quotes the 96-bit gap as 96 ns at 100 Mb/s; it is 960 ns. The gap
  is checked in bit times, which is what the standard means.

## Files and simulation

`rtl/epp_pkg.sv` holds the shared types, constants and the CRC byte step;
each other `rtl/*.sv` is one module. `tb/tb_epp_pkg.sv` holds the reference
CRC and frame builders; `tb/tb_<module>.sv` tests one module and prints
`TB_RESULT checks=N failures=M` at the end. To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/epp_pkg.sv tb/tb_epp_pkg.sv rtl/*.sv tb/tb_epp_top.sv \
  --top-module tb_epp_top -o sim
./obj_dir/sim
```

For a single block, replace `rtl/*.sv` with that block's file and the
testbench with its own. `tb_epp_top` runs at the default parameters and takes
well under a second. Lint with
`verilator --lint-only -Wall -Irtl rtl/epp_pkg.sv rtl/epp_top.sv --top-module epp_top`;
the remaining warnings are unused bus fields in blocks that need only some of
them, unused package constants, and `rst_n` used both as asynchronous reset and
in the assertions' `disable iff`.
