# A whitelist packet sniffer for 10 Gbit/s Ethernet

This is synthesizable SystemVerilog for a stateless, hardware intrusion-detection
system (IDS). It sits passively on one Ethernet receive link. It decodes the header
of every frame and verifies its IPv4 and TCP/UDP/ICMP checksums. It then checks the
frame against a small whitelist of rules and counts the outcome. A PC loads the rules
and reads the counters over a UART. A frame that matches no rule is counted as a
rule violation and makes the sniffer send an alert byte to the PC. Nothing is ever
dropped or modified, because the sniffer only observes the traffic.

The design follows a published FPGA packet sniffer. That design was built for a 10 Gbit/s link
(64-bit MAC interface at 156.25 MHz) and later widened to 100 Gbit/s (512-bit
interface at 322.26 MHz). The block structure, the signal names, the 4 x 4 x 224-bit
rule store and the few printed codes come from that design. Most of what sits inside
the blocks was not published and is this implementation's own. The section
"What comes from the published design" says which parts are which.

## Block structure

```
             156.25 MHz (MAC_RX_CLK = FW_CLK)                              |  10 MHz (UART_CLK)
                                                                           |
 MAC rx AXI-stream   +-------------------+  FW bus  +----------------+     |
 (valid,data,keep, ->| mac_rx_controller |--------->| frame_analysis |     |
  last,user)         +-------------------+          +----------------+     |
                                                          | frame parameters
                                                          v                |
                     +-----------------+  rules   +----------------+       |      +-----------------+
                     | fw_rules_memory |--------->| fw_rules_check |       |      |                 |<- uart_rx
                     | 4 banks x 4 x   |<---------+----------------+       |      | uart_controller |-> uart_tx
                     | 224 bit         |  rd addr  | FW_RESULT, PACKET_TYPE,|      |                 |
                     |   write port  <-|-----------|-OUT_RESULT-----------|------|  rule writes    |
                     +-----------------+           v                       |      |                 |
                                          +----------------------+ snapshot|      |                 |
                                          | statistics_generator |-------->|----->|  'S' replies    |
                                          +----------------------+<--------|------|  req/clear      |
                                                                           |      +-----------------+
```

Top module: `packet_sniffer_top`. The Ethernet transceiver, PCS and MAC are not
part of this RTL. They are a vendor subsystem that delivers received frames as an
AXI-stream. That stream enters through the top's `mac_rx_*` ports. The two clocks
(`mac_rx_clk`, `uart_clk`) and one asynchronous reset `rst_n` are inputs. Each
domain releases the reset through its own `reset_sync`.

Three things cross between the clock domains:

* **Rules.** Each bank of `fw_rules_memory` is a simple dual-port RAM. Its write
  port runs on the UART clock and its read port on the frame clock, so the RAM
  itself is the crossing.
* **Statistics.** The UART side toggles a request bit. The statistics block
  synchronises it, copies its live counters into a snapshot register and toggles
  an acknowledge bit. The snapshot then stays unchanged until the next request, so
  the UART side reads it safely once it sees the acknowledge. A clear command
  crosses the same way.
* **Alerts.** On a rule violation the statistics block changes an alert toggle,
  but only when the UART side has acknowledged the previous change. Violations that
  arrive while an alert is outstanding set one pending bit, and that bit raises the
  next alert. Alerts are therefore merged when violations come faster than the
  UART can report them, but none is lost.

## Receive stream and the FW bus

The MAC has no back-pressure, so the sniffer must take one beat on every clock.
`mac_rx_controller` registers each beat once. It adds the information that the
frame analysis needs:

| signal | meaning |
|---|---|
| `fw_enable` | a beat is present (MAC valid, one clock later) |
| `line_number[15:0]` | index of the beat within its frame; 0 for the first beat and between frames |
| `fw_data`, `fw_keep` | the beat; forced to zero when no beat is present |
| `fw_last` | last beat of the frame |
| `fw_out` | one-clock pulse on the clock after the last beat: the whole frame has been delivered |
| `fw_frame_ok` | the MAC's verdict on the frame (`MAC_RX_USER` on the last beat), valid with `fw_out` |

Byte 0 of the frame (the first byte on the wire) is in bits [7:0] of a beat. The
10G MAC raises `MAC_RX_USER` together with `MAC_RX_LAST` on a good frame. The 100G
MAC keeps it low on a good frame. `RX_USER_GOOD` gives the level of the user bit on
the last beat that means "good": 1 by default, 0 for the 512-bit variant.

Timing from the last beat of a frame, when that beat is on `mac_rx_*` in clock L:

| clock | event |
|---|---|
| L+1 | beat on the FW bus with `fw_last` |
| L+2 | `fw_out` |
| L+3 | header parameters registered, `frame_params_valid` |
| L+4+DEPTH (L+8 by default) | `out_result` with `fw_result` and `packet_type` |
| L+5+DEPTH | statistics counters updated |

## Header analysis and checksums

`frame_analysis` does most of the work. It computes everything in a single pass over
the stream, without buffering the frame.

**Header buffer.** The first `HDR_BYTES` = 96 bytes of each frame are kept. On the
first beat of a frame, bytes not written by that beat are cleared, so fields beyond
a short frame read as zero. Ninety-six bytes cover the largest case: an IPv4 header
of 60 bytes (IHL = 15) followed by the TCP flags at offset 13 of the TCP header.

**Streaming checksums.** On every beat, each 16-bit lane (two bytes in network
order, at frame offset `o`) is added into one of two 32-bit one's-complement
accumulators:

* to the IPv4 accumulator if `14 <= o < 14 + 4*IHL`;
* to the L4 accumulator if `14 + 4*IHL <= o < 14 + total_length`. If the second
  byte of the lane lies past the end of the segment, it counts as zero.

The upper bound comes from the IPv4 total length, so Ethernet padding of short
frames is left out. The IHL (byte 14) and total length (bytes 16-17) that steer the
selection may arrive in the same beat that needs them. They are therefore taken from
the bus when the byte is in the current beat, and from the header buffer after that.
No lane depends on a field that has not arrived yet: the total length is only
consulted for lanes beyond the IPv4 header, which arrive after it. Because the IPv4 header starts at offset 14 and
is a whole number of 32-bit words long, every region starts on a lane boundary for
any even beat width.

**Decoding.** The parameters are decoded from the buffer when `fw_out` arrives:

* MAC addresses and EtherType;
* for IPv4: the protocol and the addresses;
* for TCP/UDP: the ports at `14 + 4*IHL` and the TCP flags;
* for ARP: the sender and target protocol addresses, reported as `ip_source` and
  `ip_dest`.

At the same time the TCP/UDP pseudo-header (addresses, protocol, L4 length) is added
to the L4 sum, and both sums are folded to 16 bits. Each checksum output holds the
folded sum over the covered bytes, the transmitted checksum included. A value of
16'hffff therefore means the frame is intact. A UDP checksum field of 0 means that
no checksum was sent, and it reads as 16'hffff. Only the checksum of the frame's own
protocol is updated; the other checksum fields, and `tcp_flags` on non-TCP frames,
keep their old values.

**Error flags.**

* `lev2_err`: the MAC flagged the frame, or the frame is shorter than 14 bytes.
* `lev3_err`: on IPv4 frames, the header checksum is wrong, the version is not 4,
  IHL < 5, the total length is smaller than the header, or the frame is shorter
  than 14 + total length.
* `lev4_err`: the TCP, UDP or ICMP checksum is wrong, or the segment is shorter
  than its header.

VLAN tags, IPv6 and IP fragmentation are not handled. For those frames only the
Ethernet fields are meaningful.

## Rules and the rules check

Each rule is one 224-bit word (`ids_pkg::fw_rule_t`). It is sent over the UART most
significant byte first:

| bits | field | meaning |
|---|---|---|
| 223 | valid | the rule is in use |
| 222 | any_lev3 | ignore the EtherType |
| 221 | any_lev4 | ignore the IP protocol |
| 220:216 | reserved | |
| 215:200 | lev3_prot | EtherType to match (0x0800 IPv4, 0x0806 ARP) |
| 199:192 | lev4_prot | IP protocol to match (6 TCP, 17 UDP, 1 ICMP; 0 for non-IP frames) |
| 191:160 / 159:128 | ip_src / ip_src_mask | source address; only bits set in the mask are compared |
| 127:96 / 95:64 | ip_dst / ip_dst_mask | destination address and mask |
| 63:48 / 47:32 | sport_lo / sport_hi | inclusive source-port range |
| 31:16 / 15:0 | dport_lo / dport_hi | inclusive destination-port range |

A frame is **allowed** if at least one valid rule matches every field. Frames without
ports (ICMP, ARP, other) carry port 0, so their rules use the range 0-0 or a wider
one. A single rule expresses, for example, "allow TCP source ports 0-255 from
10.0.0.0/8 to any host". The rule store starts all zero, so every frame is blocked until rules are
loaded.

`fw_rules_check` latches the parameters on `frame_params_valid` and walks the
memory: each read returns one word from each of the four banks (rules a, 4+a, 8+a,
12+a), and the four are compared in parallel on the clock they arrive. After DEPTH =
4 reads the result is registered:

| `fw_result` | meaning |
|---|---|
| 3 | allowed: some rule matched |
| 2 | rule violation: no rule matched |
| 1 | error: `lev2_err`, `lev3_err` or `lev4_err` set (rules not consulted) |
| 0 | no frame checked since reset |

| `packet_type` | 1 TCP | 2 UDP | 3 ICMP | 4 ARP | 0 other |
|---|---|---|---|---|---|

A check occupies the checker for DEPTH clocks, so it can accept one frame every
DEPTH clocks. At 8 bytes per beat even a minimum Ethernet frame (60 bytes, 8 beats)
takes 8 clocks, so no frame can be lost at 10 Gbit/s. If frames come faster, which
is possible only with the 512-bit configuration and frames of 1-3 beats, the frame
that arrives while the check is busy is not checked. `check_overrun` pulses for it.

## Statistics

The 32-bit counters are, in the order the UART sends them: `packet_error`,
`packet_rulev`, `packet_pass`, `tcp`, `udp`, `icmp`, `arp`. On every result exactly
one of the first three counters is incremented. The protocol counters count every
checked frame, whatever its result.

## UART protocol

The UART uses 8N1 framing at `CLKS_PER_BIT` clocks of `uart_clk` per bit. The
default of 87 gives 115 kbaud from 10 MHz. Bytes sent by the PC:

| command | bytes | reply |
|---|---|---|
| write rule | `'W'` (0x57), rule index (0-15), 28 bytes of the rule word, MSB first | `'K'` |
| read statistics | `'S'` (0x53) | `'S'`, then 28 bytes: the 7 counters, each MSB first |
| clear statistics | `'C'` (0x43) | `'K'` |

The sniffer also sends on its own the **alert** byte `'A'` (0x41). It does so when
at least one frame has matched no rule since the last alert. An alert is only sent
while no command is in progress, so it never splits a reply. It may come just
before one, and the `'S'` header of the statistics reply lets the PC tell the two
apart. A command sent while an alert is going out is still received.

Other bytes are ignored. Rule index i goes to bank i/4, word i%4. A write takes
effect on the clock after its last byte. A check in progress may see the old or the
new rule.

## Throughput and the 100 Gbit/s configuration

At the defaults, the data path takes one 64-bit beat per 156.25 MHz clock. That is
10 Gbit/s of frame data with no stall at any frame length or gap. The rate measured
at the MAC interface then follows `DR = 64*N_FW / ((N_FW + N_MAC + N_DELAY) * 6.4 ns)`.
Here N_FW is the frame length in beats, N_DELAY the gap between frames, and N_MAC
the MAC's own gap, which lies outside this RTL.

Setting `BYTES = 64` and `RX_USER_GOOD = 0` gives the 512-bit variant for a
100 Gbit/s MAC at 322.26 MHz.
The controller, the analysis (lane selection, header buffer) and the top are all
written for any even beat width. The rules check still needs DEPTH clocks per frame.
So frames of 1 to 3 beats (up to 192 bytes) that follow each other closer than 4
clocks are not all checked: they raise `check_overrun`. In the published 100 Gbit/s
length sweep this affects the 64- and 100-byte frames at gaps below 3 and 2 clocks.
Frames of 4 beats (193 bytes) and more are always checked.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `packet_sniffer_top` | `BYTES` | 8 | bytes per MAC beat (64 for the 100G variant) |
| | `N_BANKS`, `DEPTH` | 4, 4 | rule RAMs and rules per RAM (16 rules) |
| | `CLKS_PER_BIT` | 87 | UART bit time in `uart_clk` clocks |
| | `RX_USER_GOOD` | 1 | level of `mac_rx_user` on the last beat that means "good frame" |
| `frame_analysis` | `HDR_BYTES` | 96 | header bytes kept; at least 88 |
| `fw_rules_memory` | `RULE_W` | 224 | rule word width (the layout above needs 224) |

## What comes from the published design and what does not

Taken from the published design:

* the block structure and the clock domains;
* the signal names and widths of the MAC interface and the FW bus (`FW_ENABLE`,
  `LINE_NUMBER[15:0]`, `FW_DATA`, `FW_KEEP`, `FW_OUT`, `FW_LAST`);
* the list of header parameters and their widths;
* checksums that read `ffff` when correct;
* the rule store: four RAMs of four 224-bit words, loaded over the UART;
* the whitelist principle over addresses, ports and protocols;
* `FW_RESULT = 3` for allowed, `PACKET_TYPE` 1 = TCP and 2 = UDP;
* the counters `#PACKET_ERROR`, `#PACKET_RULEV`, `#PACKET_PASS`, `#TCP` and `#UDP`,
  and the existence of an ICMP count;
* the 64-bit and 512-bit bus widths.

This implementation's own choices:

* all internal timing and latencies;
* how the parameters and checksums are computed, and the error rules;
* the rule word layout and the matching semantics: masks, port ranges, wildcards;
* the result codes other than 3, and the packet-type codes other than 1 and 2;
* the ARP counter and the ARP address reporting;
* the clear command and the clock-domain handshake;
* the UART command set, the alert byte, and the baud rate. The baud rate is the one the published
  test generator used; the sniffer's own rate was not given.
* reset behaviour and the all-zero power-up rule store.

Where this RTL departs from the published description, or had to choose between
readings of it:

* **Alerts.** The published sniffer is said to raise an alert when a frame matches no
  rule, but how the alert is delivered is not described. Here it is the `'A'` byte
  on the UART, merged across bursts of violations. A per-frame indication is also
  available as `out_result` with `fw_result = 2`.
* **`MAC_RX_USER` polarity.** The published text describes the transmit-side user
  bit as flagging errors. The 10G receive waveforms show `MAC_RX_USER` high on the
  last beat of good frames. The 100G waveforms show it low on a good frame. The RTL
  follows the waveforms: `RX_USER_GOOD = 1` (the default) for the 10G MAC, and
  `RX_USER_GOOD = 0` for the 100G MAC.
* **Short frames.** The published 10 Gbit/s sweep includes 50-byte frames. They are
  below the Ethernet minimum, so the testbench sends them padded to 60 bytes
  (8 beats), as a MAC would.
* **Back-to-back short frames at 512 bits.** These are not all checked (see above).
  The published work tested rule checking at 100 Gbit/s only with single frames.

Not included:

* the vendor Ethernet subsystems (10G and 100G);
* the board clocking;
* the separate packet generator used as test equipment. Its role is played by the
  testbenches.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` at the end and has a watchdog.

| testbench | what it shows |
|---|---|
| `tb_mac_rx_controller` | random beats/gaps/frames; FW bus equals the registered beat, beat index, `fw_out` exactly one clock after the last beat, MAC status passed on |
| `tb_frame_analysis` | 400 random TCP/UDP/ICMP/ARP/non-IP frames, with IPv4 options, corrupted checksums and bad MAC status, gaps including 0; every parameter and error flag against the values the frame was built from; `params_valid` one clock after `fw_out` |
| `tb_fw_rules_memory` | zero power-up contents, write/read of all 16 words across the two clocks |
| `tb_fw_rules_check` | 1200 random frames against random rule sets and an independent whitelist model; latency DEPTH+1; frames every DEPTH clocks all checked; overrun flagged |
| `tb_statistics_generator` | counters against a model; snapshot handshake from an unrelated clock; snapshot holds; clear; every alert follows a violation and every violation is alerted |
| `tb_uart_controller` | rule writes (index, word, single pulse, reply), statistics dump with header, clear, unknown bytes ignored; alerts sent when idle, held back during a command, and a command served while an alert goes out |
| `tb_packet_sniffer_top` | end to end, UART at 8 clocks/bit: rules loaded over the UART, 600 mixed frames (allowed, blocked, L2/L3/L4 errors, all protocols, back-to-back), each result and its latency checked, statistics read back and compared, cleared, rules replaced, overrun provoked; alerts seen, only between replies, never more than violations |
| `tb_sniffer_port_ranges` | all parameters at their defaults: 6 runs of 1024 TCP frames with source ports 0-1023; whitelists 0-3 ... 0-255 loaded over the 115 kbaud UART give 4, 16, 32, 64, 128, 256 allowed frames (0.39 % ... 25 %), and an alert in every run |
| `tb_sniffer_paper_frames` | the frames of the published waveforms, on a 64-bit and a 512-bit sniffer: four 65-byte UDP/TCP frames with the printed MAC/IP addresses, ports and TCP flags, and the 88-byte TCP frame (2 beats of 64 and 24 bytes at 512 bits); every FW bus beat, decoded field, checksum (ffff), FW_RESULT = 3, PACKET_TYPE, latency, and the counters (4 allowed, 2 TCP, 2 UDP after four frames) |
| `tb_sniffer_data_rate` | UDP frames of 50-1500 bytes (10G; 50 padded to 60) and 64-1500 bytes (512-bit variant) with gaps of 0-50000 clocks; stream accepted at the full beat rate, every frame checked, and overrun flagged exactly where frames outpace the check |

The frames in the testbenches are built by `tb/tb_eth_pkg.sv`, which computes every
checksum independently of the RTL. The two-width
benches `tb_sniffer_paper_frames` and `tb_sniffer_data_rate` each run two copies of
a bench module (`sniffer_frames_bench`, `sniffer_rate_bench`). `uart_byte_sink`
collects everything the sniffer sends on its UART.

To simulate a testbench with Verilator 5, from the folder holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_packet_sniffer_top -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/ids_pkg.sv tb/tb_eth_pkg.sv tb/tb_packet_sniffer_top.sv
./obj_dir/Vtb_packet_sniffer_top
```

Replace the top module and the file name to run another testbench. Each simulation
takes a few seconds. The RTL lints with Verilator and elaborates with the slang
front end of Yosys, without errors. The remaining Verilator warnings concern unused
bits of the shared structs, and the assertion in the top sampling the synchronised
reset. Nothing has been run on an FPGA.

## Files

`rtl/ids_pkg.sv` holds the shared types: frame parameters, rule word, result and
packet-type enums, and the statistics struct. It also holds the rule-match and
checksum-fold functions. The remaining files hold one module each:

* the blocks above;
* `uart_rx`, `uart_tx`: 8N1 UART;
* `sync_2ff`: two-flop synchroniser;
* `reset_sync`: per-domain reset release.
