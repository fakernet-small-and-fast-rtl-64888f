# Fakernet: a TCP data source and UDP register endpoint in a few FPGA state machines

A front-end board in a data acquisition system has two jobs on the network. It has
to send a continuous stream of measurement data to a PC. It also has to let the PC
read and write its control registers. A general TCP/IP stack with a soft CPU is far
more than either job needs. Fakernet does both with a handful of state machines and
RAM blocks, and a few thousand LUTs.

- **Data stream.** The board is a TCP server. It accepts one connection and only
  ever sends data on it.
- **Control path.** Register accesses (32-bit address + 32-bit data) travel over
  UDP. Sequence numbers make them reliable.
- **Housekeeping.** ARP requests and ICMP echo (ping) are answered, so ordinary
  tools on the PC work unchanged.

The PC needs no special driver: it talks to the board with ordinary sockets.

This repository holds synthesizable SystemVerilog for the complete packet engine
(`rtl/`) and a self-checking testbench for every block plus an end-to-end one
(`tb/`). The PHY chip and the PHY-to-word serialiser/deserialiser are not
included. They depend on the board, and the top level brings out their word
interface as ports.

## The main idea: data flows one way through RAMs

Every packet that leaves Fakernet is built in a RAM before it is sent. Each RAM
has exactly one writer and one reader. A small control block beside each RAM
(`fnet_pkt_buf`) says whether it holds a complete packet and how long it is:

- the writer fills the RAM and *commits* a length;
- the reader sees *ready*, sends the packet, and *releases* the RAM;
- a writer that finds its RAM still full simply drops its packet.

Dropping is safe because every protocol served here recovers by retransmission.
No state machine ever waits for another, so there are no deadlocks and no
arbitration beyond the output multiplexer.

```
  in_word --> input FSM --+--> ARP/ICMP/UDP response RAM ------------------------+
                          +--> register access RAM --> reg. access FSM           |
                          |         (user registers / internal registers)        |
                          |                         --> register result RAM -----+--> output FSM --> out_word
                          +--> TCP template RAM --+                               |    (preamble, FCS, gap)
                          +--> ACK, window -------+-> TCP control                |
                                                  |      | request               |
  user data --> fill control --> data buffer RAM -+-> TCP prepare FSM            |
                                                         --> TCP RAM 1 / RAM 2 --+
```

| Module | Role |
|---|---|
| `fakernet` | top level, wiring of the figure above |
| `fnet_in_fsm` | parses every received word, writes responses on the fly |
| `fnet_pkt_buf` | packet RAM plus its ready/length control block |
| `fnet_dpram` | plain one-writer/one-reader RAM (template, data buffer) |
| `fnet_regacc_fsm` | performs the register accesses of a UDP request |
| `fnet_int_regs` | Fakernet's own registers (status, TCP reset, test limits) |
| `fnet_debug_counters` | event counters kept in a RAM |
| `fnet_tcp_control` | TCP state, stream pointers, retransmission decisions |
| `fnet_rtt_filter` | round-trip-time filter (16 samples) |
| `fnet_fill_control` | user data interface into the circular data buffer |
| `fnet_tcp_prep` | builds TCP packets (header, payload, checksums) |
| `fnet_out_fsm` | picks a packet, adds preamble, FCS and inter-packet gap |
| `fnet_datagen` | optional test data generator |
| `fnet_pkg` | word offsets, types and checksum/CRC helpers |

All data is handled as 16-bit words, with the first octet on the wire in bits
[15:8]. Word 0 is the first word of the destination MAC address; the preamble is
not stored. At 1 Gbps this needs 62.5 M words/s, so a clock above about 65 MHz is
enough. Headers are assumed to have no IP options.

## Answering while parsing: the input FSM

This is the heart of the design and the least obvious part. `fnet_in_fsm` does
not store a received packet and then decide what to do with it. Instead, as each
word arrives it:

1. checks the word against what is allowed at that position (EtherType, ARP
   opcode, IP version and length, our MAC and IP address, protocol, port, ...).
   The first word that is not allowed sends the FSM back to idle, and the
   packet is forgotten.
2. writes the word, possibly changed and at a shifted position, into **every**
   RAM that might need it as a response. Source and destination fields swap
   places, which is a fixed offset in words:
   - MAC addresses: ±3 words;
   - IP addresses: ±2;
   - UDP/TCP ports: ±1;
   - ARP sender/target: ±5.
   Our own address is filled in where the request had a broadcast or zero.
3. keeps running sums for the IP, ICMP, UDP and TCP checksums and the Ethernet
   CRC.

Only when the final FCS word checks out, and all other checksums did, is the
response in its RAM committed. A packet that fails anywhere leaves its response
RAM half-written but never marked ready, so the next packet overwrites it.
Connection state (UDP channels, TCP ACKs) also changes only at that commit.

The responses need these changes on the way:

- **ARP reply.** The opcode becomes 2, and the sender fields become our MAC and IP.
- **ICMP echo reply.** The type becomes 0. The checksum is updated incrementally:
  because exactly one word changed by 0x0800, the new checksum is the old one
  plus 0xF7FF, folded. This needs no second pass over the data.
- **UDP register request.** The packet is copied into the register access RAM,
  with the two status words at the start of the payload filled in.
  The UDP checksum is recomputed later by the register access FSM.
- **UDP arm/reset requests.** These are answered directly from the response RAM.
  The UDP checksum is written last, since it is summed on the way.
- **TCP SYN.** While no connection exists, the SYN's first 27 words are written to
  the TCP template RAM. Addresses and ports are swapped, and the acknowledgement
  field is set to the SYN's sequence number + 1. The template is later the header
  of every packet sent. TCP options are accepted and ignored; no options are sent.
- **TCP ACK.** The acknowledgement number and window are reported to the TCP
  control. This happens only if the number lies between the oldest unacknowledged
  octet (base) and the newest sent one (front), inclusive.

Dropped packets and packets not for us are counted by the debug counters, as are
the kinds of packets answered.

## Register access over UDP

A request is a UDP packet with this payload:

| word | content |
|---|---|
| 0, 1 | status (filled in by Fakernet in the reply) |
| 2 | request word: [15:14] command, [11:0] sequence number or token |
| 3 | reply word (Fakernet echoes the request) |
| 4.. | accesses, 4 words each: 32-bit address, 32-bit data |

Address bits:

- bit 31: read;
- bit 30: write;
- bit 29: set in the reply when the access completed;
- bit 27: selects Fakernet's internal registers instead of the user circuit;
- bits 24:0: the register address.

`fnet_regacc_fsm` copies the request from the register access RAM into the
register result RAM. For each access it pulses `reg_read` or `reg_write` with the
address and data held. If `reg_done` arrives within `REG_TIMEOUT` (10) cycles:

- the done bit is set;
- for a read, the data field is replaced by `reg_data_rd`.

If `reg_done` does not arrive in time, the done bit stays clear and the PC sees
the failure. The UDP checksum is summed as the words go by and written last.
One request is handled without interruption. Requests on different channels are
not ordered against each other.

**Channels.** There are `NUM_UDP_CH` channels (default 2), one UDP port each,
starting at `UDP_PORT_BASE`:

- **Channel 0 is idempotent.** It ignores sequence numbers and does not remember
  the client. Any number of clients can use it at once, for reads of status and
  counters.
- **Channels 1 and up are reliable.** A client must first *arm* the channel
  (command 01). Arming is refused while the channel is in use and has not been
  idle for two `timeout_tick` periods. The reply carries a token. The client then
  *resets* the channel with that token (command 10). This binds the client's IP
  address and port, and sets the first sequence number.
- Each following access request must carry the next sequence number.
- A request with the current (previous) number makes the result RAM transmit its
  last response again, without repeating the accesses. This covers both a lost
  request and a lost reply.

Each reply's status words carry:

- status 0: [15:8] the channels in use, [1:0] the TCP state;
- status 1: [0] the data buffer overflow flag.

### Internal registers (address bit 27 set)

| address | access | content |
|---|---|---|
| 0x000 | R | [1:0] TCP state, [2] overflow, [15:8] UDP channels in use |
| 0x001 | W | any write resets TCP and clears the data buffer |
| 0x002 | RW | maximum TCP payload in octets (default 1440) |
| 0x003 | RW | limit on the receive window used (octets) |
| 0x004 | RW | data generator: [0] enable, [15:8] words per group (default 16) |
| 0x005 | R | current RTT estimate, in `slow_clock_tick` units |
| 0x100+i | R | debug counter i (see below) |

The debug counters are, from i = 0 upwards:

| i | event |
|---|---|
| 0 | good packet received |
| 1 | packet dropped |
| 2 | ARP request answered |
| 3 | ICMP echo answered |
| 4 | UDP request handled |
| 5 | TCP segment accepted |
| 6 | frame transmitted |
| 7 | TCP retransmission |

The counters live in one RAM. Each event only sets a flag. A process with a
four-cycle rhythm reads a flagged counter, writes it back plus one, and clears
the flag. Its other two cycles serve register reads. Each counter is exact as
long as its own event fires less than once per four cycles while other events
are pending; Ethernet packets are far rarer than that.

## The TCP side

### Connection

Only one connection exists. After reset (or a write to internal register 0x001)
the state is *closed*. The first valid SYN becomes the template, and the TCP
control asks once for a SYN-ACK. The PC's ACK then makes the connection
*established*. While connected, further SYNs are ignored. A new connection needs
the reset register again, which also empties the data buffer. The design never
sends FIN or RST and never receives data; the window it advertises is the
constant `OUR_WINDOW`.

### Pointers

The stream is described by three octet offsets:

- **base**: acknowledged by the PC;
- **front**: sent at least once;
- **avail**: committed by the user.

The PC's last window is kept beside them. The input side moves base; the output
side moves front. They interact only through differences of these values, so
there is no ordering problem between them.

Whenever the prepare FSM can take a request, `fnet_tcp_control` offers one of:

- the SYN-ACK;
- a pending retransmission, from base;
- new data from front, as much as the following allow:
  - avail;
  - the maximum payload (1440 octets, or the test limit);
  - the remaining window (also capped by the test limit).

  The amount is rounded down to whole 32-bit words.

### Retransmission

Retransmission is deliberately conservative. One packet from base is sent when:

- three ACKs name the same point (the original and two duplicates) while data
  is outstanding; or
- no ACK has arrived for twice the RTT estimate. This also probes a receive
  window of zero, with a zero-length packet if needed.

Each timeout raises the RTT estimate by one unit, saturating at 16 bits. If the
PC goes away, the retransmissions slow to a trickle instead of the connection
being dropped.

The RTT itself is measured on one packet at a time:

- a measurement starts when new data is sent;
- it ends when an ACK covers that data;
- any retransmission cancels it.

Samples go through `fnet_rtt_filter`. It keeps the maximum of each group of four
samples, then outputs the minimum of four such maxima. The filtered value
replaces the estimate until the next full set of 16 samples. `RTT_INIT` (100
ticks) is used until then.

### Building packets

A TCP checksum covers the payload but sits in the header, so `fnet_tcp_prep`
builds each packet completely in one of two RAMs before it is sent. The two RAMs
alternate, so one can be filled while the other is on the wire. In one pass it:

1. reads the 27 header words from the template, replacing the IP length, the
   sequence number (`TCP_ISN`+1+offset), the flags, the window and the urgent
   pointer;
2. reads the payload from the data buffer, one 32-bit word as two 16-bit words;
3. pads to the 60-octet minimum;
4. writes the IP and TCP checksums, summed along the way, into their places;
5. commits the RAM.

The TCP control's front pointer advances when the prepare FSM takes the request.

### Feeding data: the fill control

The user writes 32-bit words into the circular buffer (`2**BUF_AW` words; 4 kiB
by default) at an *offset* from the current commit point. Words can be written
in any order and rewritten. Committing a length hands the group to TCP for good.
A write may come in the same cycle as its commit.

`data_free` says that one more group of the largest size (`2**OFFSET_BITS` = 128
words) fits. Two thresholds make the interface tolerant of delay:

- `data_free` drops as soon as less than **three** groups' worth is free;
- a write only counts as overflow when less than **one** group's worth is free.

A group started while `data_free` was high can therefore always be completed.
All interface signals pass two register stages, so the user circuit can sit in a
different part of the chip without timing trouble. An overflow is sticky: it is
shown in the status words and blocks writing until the next TCP reset.

`fnet_datagen` is a built-in producer for tests. It writes a running 32-bit
counter in groups whenever `data_free` is high, so a PC can check the stream for
gaps.

## Sending: the output FSM

`fnet_out_fsm` takes ready packets in a fixed priority:

1. the ARP/ICMP/UDP response RAM;
2. the register result RAM;
3. the two TCP RAMs, in the order they were filled.

TCP data therefore never delays control traffic. For each packet it sends:

- the preamble, seven 0x55 octets and the start-of-frame delimiter 0xD5 (last
  preamble word 0x55D5);
- the packet words;
- the CRC-32 frame check sequence, computed on the fly;
- 12 idle octets of inter-packet gap.

It releases the RAM after the last word.

## Top-level interface (`fakernet`)

| group | signals | behaviour |
|---|---|---|
| receive | `in_word`, `in_gotword`, `in_newpacket` | `in_newpacket` pulses once before a frame; `in_gotword` marks each valid word |
| transmit | `out_word`, `out_ena`, `out_payload`, `out_taken` | word held until `out_taken`; `out_payload` marks frame words; during the gap `out_ena` is low |
| config | `cfg_macaddr`, `cfg_ipaddr` | our addresses |
| ticks | `slow_clock_tick`, `timeout_tick` | RTT unit (µs range); UDP channel ageing (about 1 s) |
| registers | `reg_addr`, `reg_data_wr`, `reg_read`, `reg_write`, `reg_data_rd`, `reg_done` | one-cycle strobe, `reg_done` within 10 cycles; never answer late |
| data | `data_word`, `data_offset`, `data_write`, `data_commit_len`, `data_commit`, `data_free` | see fill control |
| | `tcp_reset` | the buffer was cleared: restart the data |

Parameters and their defaults:

| parameter | default | meaning |
|---|---|---|
| `NUM_UDP_CH` | 2 | UDP register access channels, channel 0 idempotent |
| `BUF_AW` | 10 | data buffer of `2**BUF_AW` 32-bit words (4 kiB); 14 gives 64 kiB |
| `OFFSET_BITS` | 7 | largest commit group 128 words |
| `UDP_PORT_BASE` | 1 | UDP port of channel 0 |
| `TCP_PORT` | 1 | TCP port |
| `TCP_ISN` | 0 | initial sequence number |
| `REG_TIMEOUT` | 10 | user register timeout |
| `MAX_PAYLOAD` | 1440 | default TCP payload limit |
| `RTT_INIT` | 100 | RTT estimate before the first filtered measurement |
| `OUR_WINDOW` | 0x1000 | window advertised to the PC |

The packet RAMs are 1024 words (`PKT_AW` in `fnet_pkg`). They hold the largest
Ethernet frame.

## Capacity

- A 1440-octet TCP payload makes a 747-word packet, which fits the packet RAMs.
- At 100 Mbps and a measured round trip of roughly 180 µs, about 2.3 kB is in
  flight, well inside the 4 kiB default buffer.
- At 1 Gbps the round trip shrinks to about 70 µs, so about 8.8 kiB would be in
  flight. That is more than the default 4 kiB buffer holds, since unacknowledged
  data stays in the buffer. Use `BUF_AW` = 12 or more for full 1 Gbps throughput;
  the large configuration (3 channels, 64 kiB) is `NUM_UDP_CH`=3, `BUF_AW`=14.
- The 16-bit TCP window suffices for all of these, so no window scaling is
  needed.

Measured in simulation (`tb/tb_fakernet_perf.sv`, default parameters, link taking
one word per clock, PC model acknowledging each segment 200 clocks after it
arrived):

| payload limit (octets) | 64 | 256 | 512 | 1024 | 1440 |
|---|---|---|---|---|---|
| octets per clock | 0.888 | 1.523 | 1.728 | 1.820 | 1.440 |
| share of the link limit 2P/(P+78) | 98.5 % | 99.4 % | 99.6 % | 97.9 % | 75.9 % |

At 1440 octets the link outruns the buffer. Keeping the link busy needs about
two full segments plus the acknowledgement delay in flight. The producer stops
at three free groups, so the 4 kiB buffer holds only about 2.5 to 3 kiB of
unacknowledged data. A slower link relative to the round trip, or a larger
`BUF_AW`, removes the limit.

| window limit (octets) | 512 | 1024 | 2048 | 4096 |
|---|---|---|---|---|
| octets per clock | 0.63 | 1.25 | 1.53 | 1.47 |

Below the bandwidth-delay product, throughput grows in proportion to the window,
about one window per 800-clock round trip. No segment ever reached beyond the
last acknowledgement plus the window.

Segments follow the data as it is committed, because a packet is prepared as
soon as a TCP RAM is free. They are therefore often shorter than the limit.

## Where this RTL departs from, or adds to, the published description

- **SFD.** The start-of-frame delimiter is the Ethernet value 0xD5. The
  original text writes it as 0x5d: the same octet with its nibbles in wire order.
- **Memory parity.** No memory parity checking and no FCS inversion on a parity
  error. The original design also lists this as not yet implemented.
- **RARP.** There is no RARP address request. The original also lists it as
  unimplemented.
- **Own choices.** The following are this implementation's choices, because the
  original does not give them:
  - the register-access bit encodings (command, token, sequence number, done
    bit);
  - the internal register map;
  - which debug events are counted;
  - the port numbers;
  - the initial RTT estimate;
  - the advertised window;
  - the generator's data pattern.
- **Shared result RAM.** A sequenced channel's repeated request is answered from
  the register result RAM. That RAM is shared by all channels, so once another
  request has used it, the old response is gone and the repeat gets no reply.
  The client then has to retry.
- **Late register answers.** A `reg_done` that arrives after the timeout is taken
  as the answer to the next access. The user circuit must never answer late.
- **One SYN-ACK per reset.** If that SYN-ACK is lost, a new connection needs the
  reset register.
- **Generator counter.** The data generator's counter is not restarted by a TCP
  reset.
- **Not included.** The PHY and the serialiser/deserialiser, including preamble
  detection on input, are the user's.

## Verification

Each block has a self-checking testbench `tb/tb_<module>.sv`. Each one compares
the block's outputs with values computed independently in the testbench, and
ends by printing `TB_RESULT checks=N failures=M`. `tb/fnet_tb_pkg.sv` holds
frame builders and checkers:

- ARP, ICMP, UDP and TCP packets;
- a bit-serial CRC-32;
- ones'-complement sums.

These do not reuse the design's own helper functions.

`tb/tb_fakernet.sv` runs the top level at its default parameters, as a PC would
use it:

1. ARP and ping;
2. malformed and foreign packets;
3. responses dropped while a RAM is busy;
4. the idempotent channel;
5. arm, reset, sequenced access and a repeated request on channel 1;
6. a register timeout;
7. internal registers;
8. a TCP handshake, then streaming with ACKs;
9. UDP traffic taking priority over TCP;
10. duplicate-ACK and timeout retransmission;
11. a zero window;
12. buffer overflow;
13. the data generator.

It counts how often each of 21 mechanisms happened and fails if any never did.
Every frame the design sends is checked for FCS, IP and layer-4 checksums.

`tb/tb_fakernet_perf.sv` also runs at the defaults. It covers:

- a handshake whose SYN carries a TCP option;
- the payload and window sweeps above, with the built-in generator as the
  source and the received stream checked for gaps;
- a register-read flood of 1200 reads (60 per request) while TCP streams. This
  took 37449 clocks, about 31 clocks per read including the PC model's packet
  handling.
- a PC that stops acknowledging. Retransmissions from the last acknowledged
  point continue. Each interval is exactly two RTT ticks longer than the one
  before, for example 3040, 3060, 3080 clocks.

The testbenches are written for a two-state simulator and initialise everything
they read. To run one with Verilator 5:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb --top-module tb_fakernet -o sim \
    rtl/fnet_pkg.sv tb/fnet_tb_pkg.sv tb/tb_fakernet.sv
./obj_dir/sim
```

The same command works for any block testbench: substitute its name and file.
Verilator finds the modules it needs through `-y rtl`. The packages are listed
first because the other files import them.

What has not been checked:

- behaviour against a real PC network stack;
- timing closure on an FPGA;
- the large configuration (`NUM_UDP_CH`=3, `BUF_AW`=14), which is a parameter
  change only and was not simulated.
