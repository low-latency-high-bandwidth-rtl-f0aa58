# EJFAT load-balancer data plane in SystemVerilog

## The problem

A detector read out in streaming mode sends its digitised data continuously, with no trigger
deciding first what is worth keeping. That data has to reach a compute cluster where software
decides. The data is cut into *data aggregation events*, often simple time slices. Every
packet of one event must reach the same compute node (CN), whichever of many sources sent it
and in whatever order it arrives. The set of CNs changes while data flows: nodes join,
leave, and run at different speeds. The sources should not have to know about any of this.

The EJFAT load balancer solves this with a single well-known IP address per experiment.
Sources tag each UDP packet with an event number and a channel number in a small *shim*
header after the UDP header, and send everything to that address. An FPGA data plane then
does the following for each packet:

1. Picks a CN from the event number by weighted round robin, so all packets of an event go to
   one node.
2. Rewrites the IP header the way a NAT does: the destination becomes the CN and the source
   becomes the load balancer.
3. Picks one of the CN's UDP ports from the channel number, so the channels of an event can be
   reassembled in parallel.
4. Removes the shim and forwards the packet.

A software control plane (CP) collects queue-fill feedback from the CNs. It recomputes the
weights about once a second and writes them into the data plane's tables. Changes take
effect at a future event number. The CP predicts that number from tag-sync messages sent by
the sources, so events already in flight are never redirected.

This repository holds RTL for that data plane. The control plane, the senders' packetiser,
the CNs' reassembly and the Ethernet MAC/PHY are software or vendor IP and are not included.
The data plane's configuration port and packet stream ports are where they connect.

## Packet format

The stream starts at the IP header; Ethernet framing is the MAC's job. Both IPv4 and IPv6 are
handled. `u` is the offset of the UDP header: 20 for IPv4 (no options, not fragmented) and 40
for IPv6 (UDP as the next header, no extension headers).

| bytes          | field                                                  |
|----------------|--------------------------------------------------------|
| 0 .. u-1       | IPv4 or IPv6 header                                    |
| u .. u+7       | UDP header                                             |
| u+8 .. u+9     | shim magic `"LB"` (0x4C42)                             |
| u+10           | shim version, 1                                        |
| u+11           | shim protocol, 1                                       |
| u+12 .. u+13   | reserved                                               |
| u+14 .. u+15   | channel tag                                            |
| u+16 .. u+23   | aggregation tag (event number), 64 bits                |
| u+24 ..        | data                                                   |

The whole header, 44 or 64 bytes, lies in the first bus beat. A forwarded packet keeps the IP
and UDP headers, rewritten, followed by the data. The rewrite sets:

- the destination address to the CN's address of the same family;
- the source address to the instance's address of that family;
- the UDP destination port to `base_port + (channel mod 2**port_bits)` of the CN;
- the IP and UDP lengths 16 bytes shorter.

The IPv4 header checksum is recomputed. The UDP checksum is needed for IPv6 and optional for
IPv4, and it covers the whole payload. The payload is never read to update it. Instead the
checksum is adjusted incrementally, by the RFC 1624 rule `HC' = ~(~HC + ~m + m')`, over the
words that change and the 8 shim words that disappear. The words that change are the
addresses, the length (which appears twice) and the port. An IPv4 packet sent without a UDP
checksum (zero) keeps zero.

The published description names the shim's contents (an event tag, a channel tag) but not its
layout. The layout above is this design's own.

## How the tables choose a compute node

Three tables, all written by the CP, turn a packet into a destination:

```
 dst IP ──► instance match ──► instance i (0..7)
 (i, tag) ─► epoch select ───► epoch e  (the valid epoch of i with the largest start_tag <= tag)
 (i, e, tag mod 512) ─► calendar ─► member m
 (i, m) ──► member table ────► CN IP, base_port, port_bits, valid
```

**Virtual instances.** There are 8, each an independent experiment with its own tables and a
well-known IPv4 address, IPv6 address, or both.

**Calendar = weighted round robin.** Each (instance, epoch) owns 512 slots, and each slot
names a member. Consecutive event numbers walk round the slots. A member with k slots receives
k/512 of the events, so the weights are slot counts. The CP changes the weights by rewriting
a calendar. A full rewrite is 512 writes, about 2 µs, against an update period of one second.

**Epochs make changes safe for events in flight.** This mechanism is the least obvious part of
the design. To change the distribution, the CP:

1. fills the calendar of an unused epoch;
2. enables that epoch with `start_tag` set to an event number it predicts the sources have not
   yet reached.

Packets of older events still select the old epoch by their tag, even if they arrive late or
out of order, so they keep their node. Removing a CN works the same way. The new calendar
leaves the node out, the node still receives the events already in progress, and once those
have drained the CP clears the old epoch and the member entry. A packet whose tag is below
every valid epoch is dropped.

**Drops.** A packet is dropped whole, and counted by reason, if:

- it is not a well-formed EJFAT packet;
- its address belongs to no enabled instance;
- its tag has no epoch;
- the calendar names an invalid member.

## Datapath and timing

The bus carries 512 bits per beat. Byte 0 is in bits 7:0, and each beat has a 64-bit byte
`keep`, `last` and a valid/ready handshake. At 250 MHz that is 128 Gb/s per port.

```
 s_* ─► S0 parse + instance match ─► S1 epoch select, calendar read ─► S2 member read
      ─► S3 drop decision + header rewrite ─► shim_strip ─► m_*
```

All pipeline stages advance together. When the output is not ready, the input is stalled; the
data plane holds no packet buffer. Otherwise it takes a beat every cycle. The first beat of a
packet leaves 5 cycles after it entered (20 ns at 250 MHz).

**Removing the shim** (`shim_strip`) shifts every byte after the shim down by 16. So output
beat j is bytes 16-63 of input beat j followed by bytes 0-15 of input beat j+1. In beat 0, the
28 or 48 header bytes stay where they are. The block holds one beat at a time. The end of a
packet has two cases:

- If the last input beat has more than 16 bytes, the rest goes out as one extra beat.
- If it has 16 bytes or fewer, it is merged into the previous output beat.

The extra beat, like a packet of a single beat, leaves in the cycle after it arrives. In
that cycle the block takes in the first beat of the next packet, which it must hold anyway.
So a packet never needs more output cycles than input cycles, and the stripper never stalls
the input.

## Two ports per FPGA

One pipeline carries 128 Gb/s. The published system quotes 200 Gb/s as the most one FPGA
carries, so the top, `ejfat_lb_fpga`, holds `NUM_PORTS = 2` pipelines, one per 100G port.
Each pipeline forwards what arrives on its port and sends it out on the same port. A
configuration write goes to the tables of every pipeline, so a tag picks the same node
whichever port its packets arrive on. The tables are replicated rather than shared through
multi-ported memories. That costs memory (about 1 Mbit in all) but keeps each pipeline
independent.

## Configuration port

`cfg` is a packed struct `{we, region, index[15:0], data[191:0]}` and makes one write per cycle.
The entry goes in the low bits of `data`.

| region       | index                          | data                                              |
|--------------|--------------------------------|---------------------------------------------------|
| `CFG_INST`   | instance                       | `{en4, en6, ip4[31:0], ip6[127:0]}`               |
| `CFG_EPOCH`  | `{instance, epoch[1:0]}`        | `{valid, start_tag[63:0]}`                        |
| `CFG_CAL`    | `{instance, epoch, slot[8:0]}`  | member[7:0]                                       |
| `CFG_MEMBER` | `{instance, member[7:0]}`       | `{valid, ip4[31:0], ip6[127:0], base_port[15:0], port_bits[3:0]}` |

Only the instance and epoch tables are reset, to invalid. The calendar and member memories
are not reset, so the CP must write a member and a calendar before it enables the epoch that
uses them. The counters `cnt_fwd` and `cnt_drop_*` count packets.

## Sizes

| constant (`ejfat_pkg`) | value | origin |
|---|---|---|
| `NUM_INST` | 8 | the published system's limit of virtual LB instances |
| `NUM_EPOCHS` | 4 | this design |
| `CAL_SLOTS` | 512 | this design |
| `MAX_MEMBERS` | 256 per instance | this design (the demonstration used 40 nodes) |
| `DATA_W` | 512 | this design |
| `NUM_PORTS` (`ejfat_lb_fpga`) | 2 | this design, from 200 Gb/s per FPGA over 128 Gb/s per pipeline |

These sizes hold the published demonstration: ten senders streaming above 100 Gb/s through
one instance to 40 CNs. They also reach the 200 Gb/s per FPGA. With packets of 1000-1460
bytes, the two-port test takes a beat on every cycle on both ports and delivers 116.2 bytes
per cycle, which is 232 Gb/s at 250 MHz.

## Where this departs from, or goes beyond, the published description

The published system is described by what it does. Everything below the level of "look up
tables configured by the control plane" is this design's own choice:

- the shim layout;
- the bus;
- the epoch table as the mechanism for tag-timed changes;
- the calendar form of the weighted round robin;
- the channel-to-port rule;
- the checksum handling;
- the two-port structure;
- the drop rules;
- all table sizes.

Not built:

- Read-back of the tables.
- IP options, IPv6 extension headers and fragments. Such packets are dropped as malformed.
- Translation between IPv4 and IPv6. A packet leaves in the family it arrived in.
- Statistics per instance. The counters count per port and per drop reason.
- The arrangement of several FPGA cards serving one instance, which scales the rate past
  200 Gb/s. Each card would take the same configuration writes, just as the two ports of
  one FPGA do.

## Files and simulation

`rtl/` contains:

- `ejfat_pkg.sv`: types, sizes and byte helpers;
- `shim_parser.sv`, `lb_addr_match.sv`, `epoch_select.sv`, `calendar_lut.sv`,
  `member_table.sv`, `hdr_rewrite.sv`, `shim_strip.sv`: the blocks;
- `ejfat_lb_dp.sv`: the pipeline of one port;
- `ejfat_lb_fpga.sv`: the top, two ports.

`tb/` holds a self-checking testbench for each block and `tb_ejfat_util.sv`, a package that
builds packets and computes the expected output byte by byte.

All testbenches run at the default sizes. `tb_ejfat_lb_fpga` drives both ports of the top at
once, checks every packet and each port's counters, and measures the full-rate bandwidth.
`tb_ejfat_lb_dp` goes deepest into one pipeline:

- it configures all 8 instances and 40 weighted CNs;
- it streams about 4,300 interleaved IPv4 and IPv6 packets from 10 sources with random gaps
  and back-pressure;
- it removes one CN and later adds another, each from a future tag through a new epoch;
- it checks every forwarded packet, the drop counters, the latency, and that each mechanism
  occurred.

`tb_clas12_stream` replays the shape of the published demonstration through one port. Ten
senders each send one packet of about 1.5 kB per event, and the events are spread over 40
equally weighted CNs. The input runs with no gaps, and the test checks every packet, that no
input stall occurs, and that the rate is above 100 Gb/s. It measures 125 Gb/s, with a latency
of 5 cycles.

Each testbench prints `TB_RESULT checks=N failures=M`. To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl +libext+.sv \
    rtl/ejfat_pkg.sv tb/tb_ejfat_util.sv tb/tb_ejfat_lb_fpga.sv --top-module tb_ejfat_lb_fpga
./obj_dir/Vtb_ejfat_lb_fpga
```

For a block testbench, replace the last file and the top module name.
