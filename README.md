# EJ-FAT load balancer datapath in SystemVerilog

Data acquisition systems at an accelerator send their event data over a wide-area network to a cluster of compute nodes (CNs) in a data centre. One *event* is a group of UDP packets, possibly from several DAQs. All packets of an event must land on the same compute node, and the set of nodes must be able to change while data is flowing. The sources should never need to know which nodes exist.

The load balancer solves this by sitting between the sources and the cluster. Every packet carries a small **LB header** between its UDP header and its payload, and the header holds a 64-bit **event number**. The balancer matches the packet against a short chain of tables. In effect it looks up "event number → epoch → calendar slot → compute node", rewrites the Ethernet/IP/UDP headers to address that node, strips the LB header and sends the packet on. No per-flow state is kept. Every decision is a pure function of the packet and the tables, so packets of one event can arrive in any order, on any port, interleaved with other events, and still reach the same node.

This repository holds RTL for that datapath. It is one 512-bit wide, two-port pipeline with write ports through which a control processor fills the tables. It also holds self-checking testbenches for every block and for the whole design.

## The LB header

The header is 16 bytes, sent in network byte order right after the UDP header. It is recognised by UDP destination port 19522 (0x4c42, "LB").

| bytes | field |
|---|---|
| 0–1 | magic, ASCII "LB" (0x4c42) |
| 2 | version (checked against the `LB_VERSION` parameter, default 1) |
| 3 | protocol |
| 4–5 | reserved |
| 6–7 | entropy: selects one of several UDP ports at the CN |
| 8–15 | event number, 64 bits |

A UDP packet to port 19522 whose magic or version does not match is dropped.

## Pipeline

```
 rx[0] ─┐                                                             ┌─ tx[0]
        ├─ ingress arbiter ─┬─ parser ─ L2 ─ L3 ─ epoch ─ calendar ─ member ─ rewrite ─┐ ├
 rx[1] ─┘  (whole frames,   │                                           (meta queue)  │ └─ tx[1]
            port tagged)    └────────────── payload buffer (512 beats) ─── deparser ──┴─ egress demux
```

Module by module:

- **`lb_ingress_arb`** takes whole frames from the two ports in round-robin order. It never interleaves two frames, and it writes the ingress port into each beat.
- Each beat is written into the **payload buffer** (`lb_fifo`, 512 beats = 32 KB). At the same time it is seen by **`lb_parser`**. The parser collects the first two beats (128 bytes) of the frame into a header vector (`phv_t`). That is enough to reach the end of the LB header after IPv6. The parser recognises:
  - ARP;
  - plain IPv4 (IHL 5, not fragmented) and IPv6 with UDP as the next header;
  - ICMP echo requests and IPv6 neighbour solicitations;
  - UDP and the LB header.

  Nothing past the LB header is examined.
- The header vector walks through five lookup stages, one cycle each:
  1. **L2 filter** (`lb_l2_filter`), keyed by (port or wildcard, MAC DA). It gives the MAC source address the balancer uses on output. A miss drops the packet, which rejects frames flooded to the balancer by the switch.
  2. **L3 filter** (`lb_l3_filter`), keyed by (port or wildcard, ethertype, IP destination or ARP target). It gives the balancer's own source IP and the **instance** (0–3). The instances are four independent virtual load balancers, each with its own epochs, calendars and members.
  3. **Epoch assignment** (`lb_epoch_assign`): a longest-prefix match on (instance, event number), giving the calendar **epoch**.
  4. **Calendar** (`lb_calendar`), keyed by (instance, epoch, event number & 0x1FF). It gives the **member** ID.
  5. **Member table** (`lb_member_table`), keyed by (instance, IPv4/IPv6, member). It gives the next-hop MAC, the CN address, the CN base UDP port and the number of entropy bits.
- **`lb_rewrite`** turns the lookups into one result per packet (`meta_t`). The result is either "drop, for this reason" or the complete new header, 42 bytes for IPv4 or 62 bytes for IPv6. Results queue in a second FIFO.
- **`lb_deparser`** pairs each result with the packet's beats from the payload buffer. It discards the packet, or sends it with the new header laid over the front and the LB header cut out.
- **`lb_egress_demux`** sends the packet back out of the port it came in on. The balancer is "one-armed": the switch treats both ports as one static link aggregate.

`ejfat_lb` is the top. It wires these together and brings out:

- the two receive and transmit streams;
- one write port per table;
- a drop strobe with a reason code.

### Drop reasons

When several reasons apply, the first one in this order is reported:

| code | reason |
|---|---|
| 1 | truncated: the frame ends inside the headers it announces |
| 2 | L2 miss |
| 3 | L3 miss |
| 4 | not an LB packet (ARP, ICMP, ND, other UDP, non-UDP) |
| 5 | LB magic or version wrong, or UDP too short for the LB header |
| 6 | no epoch matches the event number |
| 7 | the calendar slot is empty |
| 8 | the member has no entry for the packet's IP version |

## Epochs, calendars and the hitless switch

The heart of the design is how it changes the set of compute nodes without splitting an event across two nodes.

### Calendars

A **calendar** is a 512-entry array of member IDs, and the slot used is the low 9 bits of the event number. Weight is expressed by repetition: a node in 2k slots gets about twice as many events as a node in k slots. Up to 512 members can be addressed, because member IDs are 9 bits. A calendar belongs to one (instance, epoch) pair. The design holds `N_INST × N_EPOCH × N_SLOT` = 4 × 4 × 512 slots in one RAM.

### Epoch assignment

The epoch table divides the 64-bit event-number space into ranges, using prefixes with longest-match priority:

- An entry of prefix length 0 is the **wildcard**. It catches everything not covered by a longer prefix.
- Any range [a, b) can be covered exactly by at most 2×64 aligned prefixes.

### Switching epochs

To move from epoch E to epoch F at a boundary event number B:

1. Write F's member entries, then every slot of F's calendar.
2. Add prefixes covering [start of E, B) and pointing to E. These events keep their old mapping.
3. Repoint the wildcard to F.

A late packet from an old event still matches one of the step-2 prefixes and goes to the same node as its siblings. Every event from B onward uses F. After the old events have drained, delete the prefixes and recycle E's calendar.

Rule: a calendar or member entry that some prefix still reaches must not be changed.

The full-size testbench runs this sequence twice, with packets of neighbouring events reordered across each boundary.

### Table writes

Each table is looked up at a different pipeline stage. A packet that is in flight while the tables are written can therefore see new contents in one table and old contents in another. The ordering above makes that harmless. Downstream tables are complete before anything upstream points at them. Nothing that a live prefix still reaches is changed.

## Header rewrite and checksums

For a forwarded LB packet the outgoing headers are:

| field | value |
|---|---|
| MAC DA | next-hop MAC of the member |
| MAC SA | LB MAC chosen by the L2 filter |
| IP source | LB address chosen by the L3 filter |
| IP destination | the CN's address of the same IP version |
| UDP source port | unchanged |
| UDP destination port | `base_port + (entropy & (2^entropy_bits − 1))`, modulo 2^16 |
| IP and UDP lengths | 16 less, since the LB header is removed |

The entropy field lets a CN spread one stream over several receive threads.

These fields are copied unchanged:

- TOS / traffic class;
- flow label;
- IPv4 ID and flags;
- TTL / hop limit.

Checksums:

- The **IPv4 header checksum** is recomputed from the new header.
- The **UDP checksum** is updated incrementally in the RFC 1624 style. The old addresses, old port, old lengths and all eight words of the removed LB header are subtracted, and the new values are added. The payload, up to 9 KB, never has to be summed, so the checksum is ready long before the packet leaves.
- An IPv4 UDP checksum of 0 means "no checksum" and stays 0.
- A computed 0 is sent as 0xFFFF.

The testbenches compute the expected checksums from scratch over the whole output packet.

## The deparser splice

The LB header is removed from the middle of the packet, and the data path is 64 bytes wide. Removing it looks like a variable byte shift, but it is not one.

The received headers end at byte 58 (IPv4) or 78 (IPv6). The sent headers end at byte 42 or 62. Both differ by exactly 16 bytes, so every sent byte k past the new header is received byte k + 16 for both IP versions. Sent beat n is therefore bytes 16–63 of received beat n followed by bytes 0–15 of received beat n+1. The new header is at most 62 bytes, so it only ever overlays sent beat 0.

The deparser needs:

- one holding register;
- a fixed 16-byte shift;
- a byte mask for the header overlay.

If the last received beat carries more than 16 bytes, one extra flush beat is sent.

Cycle cost: the first beat of a packet is absorbed without output. A packet of N beats costs N+1 cycles, or N+2 with the flush beat.

## Throughput and latency

With a 9000-byte frame (141 beats) the pipeline sustains 0.993 beats per cycle, which the top-level testbench checks (it requires ≥ 0.98). To carry 98 Gb/s the clock must therefore be about 193 MHz or faster.

Small frames cost relatively more:

- one cycle per packet in the deparser;
- an arbitration bubble only when the port changes.

A packet's result is ready a few cycles after its second beat has been parsed. Until then its beats wait in the payload buffer. The deparser does not start a packet before its result exists.

The ingress ready falls only when:

- the payload buffer is full, or
- the result queue is full. It has the same depth as the payload buffer, so it fills only with a stream of one-beat packets.

## Parameters (top `ejfat_lb`)

| parameter | default | meaning |
|---|---|---|
| `NUM_PORTS` | 2 | 100G ports, one pipeline shared by both |
| `L2_ENTRIES` | 16 | L2 filter entries |
| `L3_ENTRIES` | 16 | L3 filter entries |
| `EPOCH_ENTRIES` | 128 | epoch prefixes, shared by all instances |
| `N_INST` | 4 | virtual load balancer instances |
| `N_EPOCH` | 4 | epochs per instance |
| `N_SLOT` | 512 | calendar slots (event number bits used = log2) |
| `N_MEMBER` | 512 | members per instance and IP version |
| `PKT_FIFO_DEPTH` | 512 | payload buffer and result queue depth, in 64-byte beats |
| `LB_VERSION` | 1 | LB header version accepted |

Widths and the stream format are fixed in `ejfat_pkg`:

- a 2-bit instance;
- a 2-bit epoch;
- a 9-bit slot and a 9-bit member ID;
- beats of 64 bytes with byte 0 of the frame in `data[7:0]`, a byte `keep` mask and a `last` flag.

Every beat of a frame except the last must be full (all 64 bytes). The last beat holds its bytes from byte 0 upward.

## Programming the tables

Each table is written through `*_wr_en` plus an address and an entry struct. Writing an entry with `valid = 0` deletes it.

A typical single-instance setup on instance 0:

- **L2 filter:**
  - (any port, LB unicast MAC) → LB MAC;
  - (any port, broadcast) → LB MAC;
  - (any port, 33:33:ff:xx:yy:zz) → LB MAC, the solicited-node multicast address.
- **L3 filter:**
  - (any port, 0x0800, LB IPv4) → (LB IPv4, instance 0);
  - (any port, 0x0806, LB IPv4) → (LB IPv4, instance 0);
  - (any port, 0x86dd, LB IPv6) → (LB IPv6, instance 0);
  - (any port, 0x86dd, ff02::1:ffxx:yyzz) → (LB IPv6, instance 0).

  IPv4 addresses are placed in the low 32 bits of the 128-bit key.
- **Members:** one IPv4 entry and one IPv6 entry per CN.
- **Calendar:** all 512 slots of epoch 0.
- **Epoch table:** a single wildcard, (instance 0, plen 0) → epoch 0.

## Where this design departs from or adds to the source description

The source describes the tables, their keys and values, the parser's protocols, the LB header and the reconfiguration procedure. The following are this design's own choices:

- **Stream format, pipeline structure and splice.** The source only names a parse stage, a payload buffer and a deparse stage.
- **Table sizes.**
  - L2 and L3 depth: 16.
  - Epoch table: 128 prefixes.
  - Epochs per instance: 4.
  - Member entries: separate IPv4 and IPv6 entries for each of the 512 members.
- **Table storage.**
  - The filters and the epoch table are small associative register arrays. The lowest index wins on an equal match.
  - The calendar and member table are plain RAMs. They are not reset, so every entry a live prefix reaches must be written.
- **Protocol details.**
  - The LB version value (1).
  - The port formula (base + masked entropy, wrapping).
  - Copied IP fields and checksum handling.
  - Drop on truncation.
  - The drop order.
  - The drop reason port.
- **Parsing limits.**
  - IPv4 with options or fragments is treated as not-LB.
  - IPv6 extension headers are not parsed.
- **Host-protocol replies are not built.** ARP, ICMP echo and IPv6 neighbour solicitation are recognised and classified by the parser, but dropped (reason 4). The source says the balancer takes part in these protocols, but gives no reply logic.
- **Not included.** The 100G MACs, the FPGA shell, PCIe and the host control software lie outside the RTL. The top's streams are the MAC-side streams, and its table ports are where a register interface from the shell would connect.
- **Timing closure.** Throughput is stated in beats per cycle. No clock frequency has been demonstrated.

## Files

| file | content |
|---|---|
| `rtl/ejfat_pkg.sv` | widths, protocol constants, beat / header-vector / table-entry / result types |
| `rtl/ejfat_lb.sv` | top level |
| `rtl/lb_*.sv` | one block per file, as in the pipeline above |
| `tb/tb_pkt_pkg.sv` | packet builders and reference model: checksums, expected CN packet |
| `tb/tb_ejfat_lb.sv` | end-to-end test at full default size |
| `tb/tb_lb_*.sv` | one self-checking test per block |

### What the end-to-end test does

`tb_ejfat_lb` runs the top at its default parameters. It models:

- 5 DAQs (four send IPv6, one sends IPv4, some with a zero UDP checksum);
- 10 compute nodes;
- 68 events split into segments of up to 9000 bytes, sent on both ports, with segments of neighbouring events reordered.

It goes through three epochs:

1. one CN;
2. three CNs;
3. ten CNs, one of them weighted double.

Along the way it covers:

- both hitless switches;
- a second instance with a half-empty calendar;
- a third instance with no epochs;
- every drop reason, including ARP, ICMP and ND frames;
- random back-pressure on both transmit ports;
- a burst of 9000-byte frames, whose rate is measured.

The checks:

- Every forwarded packet is compared byte for byte with an independently built expected packet.
- Every packet of an event must reach the node its epoch assigns.
- No event may be split across nodes.
- In the last epoch, the double-weighted node must receive more events than any other node.
- Each mechanism (epoch switches, late packets of an old epoch, port stalls, flush beats, each drop reason, both IP versions, zero checksum) is counted, and one that never occurred is a failure.

Each block test prints `TB_RESULT checks=N failures=M`.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
    -y rtl -y tb +libext+.sv rtl/ejfat_pkg.sv tb/tb_pkt_pkg.sv tb/tb_ejfat_lb.sv \
    --top-module tb_ejfat_lb -o sim
./obj_dir/sim
```

Replace `tb_ejfat_lb` by any `tb_lb_*` test to run a single block. The two packages must be named on the command line. Verilator finds the rest through `-y`. The end-to-end test finishes in well under a second of simulation time on a desktop. The simulation needs no initial x handling: everything that is read is reset or written first.
