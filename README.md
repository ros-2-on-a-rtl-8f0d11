# ROS 2 networking in hardware: UDP/IP, RTPS/DDS and ROS 2 entities as one datapath

A ROS 2 message normally crosses four software layers on each side of a link:
the ROS client library, the middleware interface, a DDS implementation
speaking the RTPS wire protocol, and the operating system's UDP/IP stack.
Each layer adds copies, queues and scheduling. The result is a mean
round-trip time of hundreds of microseconds, with worst cases far above that.

This design puts all four layers into one clocked datapath. An Ethernet frame
comes in from a MAC. The IP header is checked, the UDP header is stripped,
and the RTPS message is split into submessages. The sample is matched to the
local reader it is for, stored in a small history cache, and handed to a
hardware subscriber, service client or action client. That block delivers
the message body to the application. The transmit direction is the mirror
image.

Every step is a fixed pipeline or a small state machine. The latency of a
message therefore depends only on its length and on which queues are already
busy. It does not depend on software load. At 156 MHz, an application write
becomes the last byte of an 88-byte IPv4 packet in 159 cycles (1.0 µs). A
received packet reaches the application 4 cycles after its last byte.

The design follows a published three-part architecture: a UDP/IP core, an
RTPS/DDS core and a ROS 2 core, each with its own block diagram. Block names
in the RTL and in this text come from those diagrams, for example
`RTPS_DECODER`, `CTRL_MEM`, `RMW_BRIDGE_RX` and `ROS_STATIC_DISCOVERY_WRITER`.
The diagrams give the blocks and their connections. They do not give widths,
encodings, queue depths, or the protocol subset that is handled. All of those
are this design's own choices, and they are described below.

## Two ways data moves

Data moves through the chip in two forms. Keeping them apart is the key to
reading the RTL.

**Below RTPS, packets are streams.** A packet is one *header record* on a
valid/ready channel. Its payload follows as a byte stream with `tdata`,
`tvalid`, `tlast` and `tready`. The header record types are in
`ros2_chip_pkg`:

- `eth_hdr_t`: MACs and EtherType;
- `ip_hdr_t`: addresses, protocol and payload length;
- `udp_hdr_t`: addresses, ports, length and checksum.

Every stream block takes the header first and then the bytes, and it keeps
them paired.

**Above the RTPS parser, everything is a fixed-size record.** One record
carries up to `MAX_PAYLOAD` = 64 bytes of serialized data, in byte `i` at bits
`[8*i +: 8]`, plus a length. A whole record moves in one valid/ready
transfer. The record types are:

- `rtps_msg_t`: one DATA or ACKNACK submessage, with the remote GUID prefix
  and locator;
- `sample_t`: one DDS sample, with the source writer GUID and sequence number;
- `ros_msg_t`: one ROS message, with the service request identity;
- `match_t`: one discovery match.

This split lets the RTPS, DDS and ROS 2 blocks make each decision in one
cycle. For example, a reader accepts a sample, drops a duplicate or asks for
a repair in the cycle the record is offered. The price is that a message must
fit one record. A ROS message body can be at most 60 bytes, because 4 bytes
go to the CDR header. A service response body can be at most 36 bytes,
because 28 bytes go to the CDR header and the request identity. Longer
messages are dropped and counted.

## Receive path, frame to application

1. **UDP/IP** (`udp_ip_stack`). EtherType 0x0806 goes to `arp`. EtherType
   0x0800 goes to `ip_rx`, which checks the following and drops the packet
   otherwise:
   - version 4, IHL 5 and the header checksum;
   - that the packet is not a fragment;
   - that the destination is the local address, broadcast or multicast.

   Protocol 17 packets go to `udp_rx`, which strips the UDP header. All other
   protocols are passed out raw on `app_ip_rx_*`. The received UDP checksum
   is not verified: the diagram has a checksum generator only on the
   transmit side.
2. **`rtps_in_parser`**. It accepts datagrams to ports 7400, 7401, 7410 and
   7411. These are the standard RTPS ports of domain 0, participant 0
   (discovery and user traffic, multicast and unicast). It then works
   through the message:
   - it checks the 20-byte RTPS header (`"RTPS"`, major version 2) and
     keeps the sender's GUID prefix;
   - it walks the submessages by their length fields, in either byte order;
   - each DATA and each ACKNACK becomes one `rtps_msg_t`, and other
     submessage kinds are skipped;
   - a DATA whose payload exceeds `MAX_PAYLOAD` is dropped.
3. **`rtps_decoder`**. It has three FIFOs, as in the diagram:
   - DATA from the two discovery writers (entity ids 0x3C2 and 0x4C2) goes
     to `RTPS_DISCOVERY`;
   - other DATA goes to the readers;
   - ACKNACK goes to the writers.
4. **`rtps_reader`** (one per local reader). All readers see each DATA record
   at the same time. The record leaves the FIFO only when every reader that
   wants it can take it. See *Reliability* below for what a reader does with
   the record.
5. **`dds_reader`**. A KEEP_LAST history cache (see below). Its input is
   always ready, so a slow application cannot stall the network side.
6. **`rmw_bridge_rx`**. Reader `i` feeds ROS entity port `i`. The ports are
   numbered in this order:
   - subscribers;
   - service clients;
   - for each action client: goal, cancel and result (service clients),
     then feedback (a subscriber).

   All entity outputs are merged round-robin onto `app_rx_*`. Each message
   is tagged with its reader index.

## Transmit path, application to frame

1. **`rmw_bridge_tx`** routes `app_tx_msg` by `app_tx_entity` to the entity
   that owns that writer. The writers are numbered in this order:
   - publishers;
   - service servers;
   - for each action server: goal, cancel and result servers, then the
     feedback publisher.

   A publisher prepends the CDR header. A service server prepends the CDR
   header and the request identity.
2. **`dds_writer`** stamps the sample with:
   - the local GUID prefix;
   - the writer entity id;
   - the next sequence number.

   It then keeps the sample in its history cache.
3. **`rtps_writer`** copies the sample into its own `PAYLOAD_MEM`, indexed by
   sequence number modulo `HISTORY_DEPTH`. It then emits one DATA record per
   matched remote reader held in its `CTRL_MEM`.
4. **`rtps_out`** holds three FIFOs, as in the diagram:
   - writer DATA, merged round-robin over the writers;
   - discovery announcements;
   - reader ACKNACKs, merged round-robin over the readers.

   It picks round-robin among the three and serializes one RTPS message per
   record: the header with the local GUID prefix, then one submessage. The
   message leaves as a UDP datagram from port 7411 to the record's locator.
5. **UDP/IP**.
   - `udp_checksum_gen` stores the datagram while it sums the pseudo-header,
     header and data. This store-and-forward pass costs one datagram length
     of latency; it is needed because the checksum precedes the data on the
     wire.
   - `udp_tx` adds the UDP header.
   - `ip_arbiter_mux` interleaves it, a whole packet at a time, with raw
     IP packets from the application.
   - `ip_tx` builds the IPv4 header: TTL 64, DF set, a running
     identification and the header checksum. It also resolves the
     destination MAC:
     - broadcast goes to ff:ff:ff:ff:ff:ff;
     - multicast is mapped to 01:00:5e plus the low 23 bits;
     - unicast is looked up in the ARP cache. On a miss, `ip_tx` waits and
       asks ARP to send a request. It drops the packet after `ARP_TIMEOUT`
       cycles.

## The RTPS subset on the wire

| Submessage | Bytes | Fields written |
|---|---|---|
| header | 20 | `RTPS`, version 2.3, vendor 00 00, local GUID prefix |
| DATA (0x15, flags E\|D) | 24 + n | extraFlags 0, octetsToInlineQos 16, readerId, writerId, SN high/low (little endian), serialized payload |
| ACKNACK (0x06, flag E) | 32 | readerId, writerId, bitmapBase = first missing SN, numBits 1, bitmap with that bit set, count |

Both byte orders are accepted on receive. Inline QoS is skipped by
octetsToInlineQos. Entity ids of local endpoints are fixed:

- reader `i` is `{00 00, i+1, 04}`;
- writer `i` is `{00 00, i+1, 03}`.

These use the "user entity, no key" kinds.

## Static discovery

Standard DDS discovery exchanges long parameter lists of QoS settings. This
chip uses a small, fixed discovery record instead. The record still travels
in ordinary RTPS DATA submessages from the usual builtin endpoints:

- remote writers are announced by the publications writer (0x3C2);
- remote readers are announced by the subscriptions writer (0x4C2).

The 20-byte payload is:

| Offset | Field |
|---|---|
| 0 | encapsulation 00 03 00 00 |
| 4 | 32-bit topic id (little endian) |
| 8 | entity id of the announced endpoint (wire order) |
| 12 | unicast IPv4 address |
| 16 | UDP port (little endian) |
| 18 | zero |

The topic is a 32-bit number that each endpoint has configured on
`reader_topic` and `writer_topic`. Topic strings and type names are not
compared.

`rtps_discovery` compares an announcement with every enabled local endpoint
of the opposite kind, one per cycle. For each endpoint with the same topic it
does the following:

- **It pushes a `match_t`** to the readers' FIFO or to the writers' FIFO.
  The match is taken by the reader or writer whose index it names and is
  stored in that endpoint's `CTRL_MEM`. A match for a remote endpoint that is
  already known only refreshes its locator.
- **It answers with the local endpoint's own announcement**, addressed to
  the announced locator, if the remote endpoint is new. A remote endpoint
  counts as new if it is not in a `SEEN_ENTRIES`-deep table of recently seen
  remote GUIDs. An endpoint that was already seen is not answered again, so
  two chips exchange exactly one announcement each way and then go quiet.
  The table is replaced round-robin, so after `SEEN_ENTRIES` other endpoints
  an old one would be answered once more, which is harmless.

Each RTPS writer reports every newly matched remote reader on `DISCOVER`.
`ros_static_discovery_writer` keeps each distinct (local writer, remote
reader) pair in an 8-entry table that the application can read through
`peer_idx`.

## Reliability: go-back-N between reader and writer

Each reader's `CTRL_MEM` holds, for every matched remote writer, the last
sequence number delivered. A DATA record is handled as follows:

- **From a writer that is not matched:** dropped.
- **The first one from a writer, or SN = last + 1:** delivered into
  `PAYLOAD_MEM`, a FIFO towards the DDS reader. The record waits if that FIFO
  is full.
- **SN ≤ last:** a duplicate, dropped and counted.
- **SN > last + 1:** a gap. The record is dropped and counted. An ACKNACK
  asking for last + 1 is queued to the writer's locator. Only one ACKNACK is
  held at a time.

A writer that receives an ACKNACK from a matched reader resends every sample
from max(requested, oldest kept) to the newest, to that reader only.

The effect is that samples are delivered in order with no holes, as long as
the writer still holds the missing ones. When it no longer does, delivery
resumes at the oldest sample the writer still has. Nothing is retransmitted
on a timer: a lost *last* sample is only repaired when a later one arrives
and shows the gap.

## History caches

`dds_history_cache` is shared by `dds_reader` and `dds_writer`. It is a
circular buffer of `HISTORY_DEPTH` samples, split over the three memories
named in the diagram:

- `SAMPLE_MEM`: source GUID, sequence number, arrival cycle and instance
  number;
- `PAYLOAD_MEM`: length and bytes;
- `INSTNCE_MEM`: per source writer, its GUID and how many samples it has
  stored.

The policy is KEEP_LAST. A new sample always goes in. When the buffer is
full, the oldest unread sample is overwritten and `overflow_count` goes up.
An application that stops reading therefore loses old samples but never
blocks the network.

## ROS 2 entities

- **Subscriber.** It checks the CDR encapsulation header: first byte 00,
  second byte 00 or 01, at least 4 bytes. It delivers the body after the
  header. `req_guid` and `req_seq` carry the source writer GUID and the
  sample SN as message info.
- **Publisher.** It prepends 00 01 00 00 (CDR little endian).
- **Service client, receive half.** A response carries the identity of the
  request it answers after the CDR header: the 16-byte client GUID (most
  significant byte first), then an 8-byte little-endian sequence number.
  Only responses whose GUID equals the client's configured `client_guid` are
  delivered, with that identity. Requests are sent through a publisher on
  the request topic.
- **Service server, send half.** It writes the CDR header, the identity
  given with the response (as it arrived with the request) and the body.
  Requests arrive through a subscriber on the request topic.
- **Action client / server.** An action client is three service clients
  (goal, cancel, result) and a feedback subscriber. An action server is
  three service servers and a feedback publisher.

## Timing

Each layer transfers one byte or one record per cycle.

| Path | Cycles |
|---|---|
| last byte of a frame → `ROS_APP_RX` | 4 |
| `ROS_APP_TX` write → last byte of an 88-byte IPv4 packet (12-byte body) | 159 |
| the same with a 60-byte body (136-byte packet) | about 290 |
| round trip through two chips, 12-byte body, without MAC/PHY/wire | 2 × (159 + 88 + 4) = 502 (3.2 µs at 156 MHz) |

The published prototype reports a 5 µs mean and an 11 µs maximum round trip
at 156 MHz, MAC/PHY and wire included. The byte-serial cost dominates this
design's numbers. The checksum buffer is the largest single item, because it
doubles the transmit time of every datagram.

The datapath is one byte wide. At 156 MHz that is 1.25 Gb/s, well below the
10 Gb/s line rate of the PHY the published design sits on. A 10G version
would widen the streams to 64 bits. The record-based upper layers would not
change.

## Parameters

| Parameter | Default | Where |
|---|---|---|
| `MAX_PAYLOAD` | 64 bytes | package; size of every record |
| `NUM_SUB`, `NUM_SRV_CLIENT`, `NUM_ACTION_CLIENT` | 1, 1, 1 | top; gives 6 readers |
| `NUM_PUB`, `NUM_SRV_SERVER`, `NUM_ACTION_SERVER` | 1, 1, 1 | top; gives 6 writers |
| `FIFO_DEPTH` | 4 | decoder, discovery and output FIFOs |
| `MATCH_ENTRIES` | 4 | remote endpoints per reader/writer (`CTRL_MEM`) |
| `HISTORY_DEPTH` | 4 | DDS history and RTPS writer `PAYLOAD_MEM` |
| `SEEN_ENTRIES` | 16 | discovery's table of answered remote endpoints |
| `ARP_TIMEOUT` | 4096 cycles | `ip_tx` wait for an ARP answer |
| ARP cache | 8 entries | `arp` |
| UDP checksum buffer | 256 bytes | `udp_checksum_gen` |

The published design gives no sizes for any of these. Entities of each kind
can be instantiated several times by raising the counts.

## Where this design departs from the published one, and what is left out

- **The Ethernet PHY and MAC are not part of the RTL.** Frames enter and
  leave as an Ethernet header record plus a byte stream (`dl_*` ports).
- **The datapath is one byte wide,** not the width a 10G line needs (see
  above).
- **RTPS is carried only over UDP.** The RTPS/DDS diagram also draws raw IP
  paths into the parser and out of `RTPS_OUT`. Raw IP is instead offered to
  the application on `app_ip_rx_*` and `app_ip_tx_*`.
- **Discovery is a static, reduced scheme** with a 32-bit topic id and a
  fixed record, not standard participant and endpoint discovery. No QoS is
  negotiated. Standard DDS implementations will not match with it.
- **Only DATA and ACKNACK submessages are understood.** HEARTBEAT, GAP,
  INFO_* and fragments are skipped. Repair is the go-back-N scheme above,
  without heartbeats or timers.
- **One ROS message must fit one record** (body ≤ 60 bytes).
- **Services and actions are built from halves.** The receive side has only
  service clients and the transmit side only service servers, as drawn.
  Requests travel as ordinary topic messages, with the request identity at
  the start of the serialized data. The ROS 2 diagram labels the parts of
  the action server with the client names. Here they are built as servers
  and a publisher.
- **Not modelled:** IP options, fragmentation and received UDP checksums.
  IGMP is not modelled either; multicast is received and mapped, but no
  group is joined.
- **Energy, resource use and fmax** are properties of an FPGA build. They
  are not addressed by simulation.

## Verification

Every block has a self-checking testbench in `tb/`. Expected values come from
byte-level builders in `tb/tb_net_pkg.sv`. These are written from the IPv4,
UDP, ARP and DDSI-RTPS layouts, with no code shared with the RTL. Each
testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. Each also has
a watchdog. Ready signals are randomized, so back-pressure is exercised on
every interface. Reference models cover:

- the reader SN state machine;
- the writer's `CTRL_MEM` and history;
- discovery's seen-table;
- the KEEP_LAST queues.

`tb_ros2_on_chip` runs the whole chip at its default parameters with two
remote peers. It goes through:

- ARP;
- discovery in both directions;
- subscription, including multi-submessage messages;
- gap detection with ACKNACK and repair, and duplicate drop;
- publication with fan-out, and resend on ACKNACK;
- service response filtering, service server, action goal and feedback;
- KEEP_LAST overflow under an application stall;
- an ARP miss;
- raw IP both ways, with arbitration;
- dropping of malformed frames.

It counts each of 27 mechanisms and fails if any never happened. It also
prints the latencies quoted above.

To run a testbench with Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_rtps_reader \
  -y rtl -y tb rtl/ros2_chip_pkg.sv tb/tb_net_pkg.sv tb/tb_rtps_reader.sv
./obj_dir/Vtb_rtps_reader
```

The same pattern works for any `tb/tb_<block>.sv`, including
`tb_ros2_on_chip`.

## Files

| File | Block |
|---|---|
| `rtl/ros2_chip_pkg.sv` | types and protocol constants |
| `rtl/ros2_on_chip.sv` | top: ROS 2 layer + RTPS/DDS core + UDP/IP stack |
| `rtl/udp_ip_stack.sv`, `ip_rx`, `arp`, `udp_rx`, `udp_checksum_gen`, `udp_tx`, `ip_arbiter_mux`, `ip_tx`, `stream_demux2` | UDP/IP |
| `rtl/rtps_dds_core.sv`, `rtps_in_parser`, `rtps_decoder`, `rtps_discovery`, `rtps_reader`, `rtps_writer`, `rtps_out`, `dds_reader`, `dds_writer`, `dds_history_cache` | RTPS/DDS |
| `rtl/rmw_bridge_rx.sv`, `rmw_bridge_tx`, `ros_subscriber`, `ros_publisher`, `ros_service_client`, `ros_service_server`, `ros_action_client`, `ros_action_server`, `ros_static_discovery_writer` | ROS 2 |
| `rtl/sync_fifo.sv`, `rr_arbiter` | shared FIFO and round-robin arbiter |
| `tb/tb_<block>.sv` | testbench per block; `tb_stream_src`/`tb_stream_sink` drive and collect byte streams |
