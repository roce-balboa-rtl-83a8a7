# RoCE BALBOA in SystemVerilog: a RoCE v2 RDMA stack for a 100G SmartNIC

RDMA lets one machine read and write another machine's memory without the remote CPU taking
part. RoCE v2 carries the InfiniBand transport over UDP/IP. The transport is reliable: every
packet has a packet sequence number (PSN), the receiver acknowledges what arrives in order, and
the sender replays what was lost. A NIC that runs this protocol at 100 Gbit/s has to do four
hard things at line rate:

- parse and build the header stack for every packet;
- compute a CRC over most of each packet;
- keep every payload until it is acknowledged;
- refuse traffic it cannot absorb without blocking its own datapath.

This RTL is one such stack. It supports Reliable Connection queue pairs (QPs) with RDMA WRITE
and RDMA READ. It is organised as the packet-processing pipeline of the RoCE BALBOA design:

- a header-by-header RX and TX pipeline around per-QP tables;
- a transport timer;
- a retransmission multiplexer backed by a payload buffer;
- a three-way ICRC pipeline;
- ACK-clocked flow control on the command path;
- credit-based dropping of incoming payload.

Every bus is 512 bits wide (one 64-byte *beat* per cycle). At the intended 250 MHz this gives
128 Gbit/s of raw capacity, enough for 100 Gbit/s plus header overhead.

## 1. The picture

```
 host commands ─► flow_control ─► ┌──────────── roce_stack ─────────────┐
 (WRITE/READ)    (per-QP budget)  │ req_merger ─► descriptors           │
                  ▲ ack events    │   ▲  ▲  ▲          │                │
                  │               │   │  │  └ retx (NAK / timeout)      │
                  │               │   │  └ READ RESPONSE requests       │
                  │               │   └ ACK/NAK requests                │
 host WRITE data ─┼──────────────►│          ▼                          │
 host READ resp. ─┼─────────► retrans_mux ◄─► retx_buffer (HBM stand-in)│
                  │               │   payload ─► exh_tx ─► ibh_tx ─►    │
                  │               │             udp_tx ─► ipv4_tx ──────┼─► icrc ─► net_tx
                  │               │                                     │
 net_rx ─────────────────────────►│ ipv4_rx ─► udp_rx ─► dropper(*) ─► ibh_rx ─► exh_rx ─► mem_cmd / data
                                  │  state, conn, msn, read-request tables; transport_timer │
                                  └─────────────────────────────────────┘
 (*) payload_dropper: receive crediting, in front of the PSN check (see 6).
```

`balboa_top` is the whole stack. Outside it are:

- the Ethernet MAC, which exchanges IP packets (ICRC included) on `net_rx`/`net_tx`;
- the PCIe DMA engine, reached through `host_rd`, `wr_beat`, `rr_beat`, `mem_cmd` and `mem_beat`;
- the HBM channel that the original design uses for retransmission payloads. Here an on-chip
  array of `2^BUF_AW` beats stands in for it.

### Stream conventions

All streams use valid/ready handshakes. A beat is an `axis_t` carrying:

- `data[511:0]`: byte lane 0 (`data[7:0]`) is the first byte on the wire.
- `keep[63:0]`: contiguous from lane 0.
- `last`.

Per-packet information travels next to the data as a `roce_meta_t` sideband that is valid on
every beat. It holds the QP, opcode, PSN, lengths, addresses and the remote IP and port.

Two helpers do all header handling:

- `axis_strip` removes N leading bytes and realigns the rest. It adds a flush beat when the tail
  spills over.
- `axis_prepend` inserts N bytes in front.

Both run at one beat per cycle.

## 2. Receive path and the PSN rules

The receive stages work as follows:

1. `ipv4_rx` accepts IPv4 without options, protocol UDP, addressed to `local_ip`. It strips the
   20-byte header and trims the packet to the IP total length.
2. `udp_rx` accepts destination port 4791 when the datagram is long enough for a BTH and ICRC.
   It strips the 8-byte UDP header.
3. `payload_dropper` applies the credit check (section 6).
4. `ibh_rx` decodes the 12-byte BTH and applies the PSN rules. It reads the state table on the
   first beat and writes it in the same cycle.
5. `exh_rx` decodes RETH or AETH and removes the 4-byte ICRC. It then produces one of:
   - a memory-write command plus payload, for WRITE and READ RESPONSE packets;
   - a READ RESPONSE job for the TX side, for a READ request;
   - a completion (or a NAK report) to the host, for an ACK or NAK.

The rules in `ibh_rx` are the core of reliability. They follow InfiniBand's Reliable Connection
behaviour, because the source paper only says that out-of-order packets are dropped.

| packet | PSN relation | action |
|---|---|---|
| WRITE / READ request | = expected `epsn` | accept; `epsn += 1` (a READ advances it by its number of response packets); ACK if WRITE LAST/ONLY or AckReq |
| WRITE | behind `epsn` (duplicate) | drop, re-ACK `epsn-1` so that a lost ACK heals |
| READ request | duplicate | execute again (the responder keeps no response state) |
| any request | ahead of `epsn` | drop; send **one** sequence-error NAK per gap (`nak_sent` bit cleared by the next in-order packet) |
| READ RESPONSE | = oldest unacknowledged `una` | accept, implicitly acknowledges that PSN |
| ACK / NAK | inside `(una-1, npsn)` | advance `una`; emit an *ack event* (QP, number of packets acknowledged, NAK flag) |

PSNs are 24 bits and compared modulo 2^24 within a half-window. Ack events go to three places:

- flow control, which returns budget;
- the transport timer, which restarts or stops;
- `req_merger`, where a NAK triggers a replay.

### ACK timing

An ACK is requested as soon as the last packet of a WRITE passes the PSN check. At that point its
payload is still on its way to host memory. A peer can therefore see the completion a few hundred
cycles before the data lands; the full-size testbench waits for this. The paper does not say when
its stack acknowledges.

## 3. Transmit path: request merger and go-back-N

`req_merger` decides what the link carries next. It chooses one of the following, in this order:

1. a pending ACK/NAK, slipped in between packets;
2. the rest of the message already being cut into packets;
3. a retransmission request;
4. READ RESPONSE jobs and host commands, which alternate round-robin per message.

### Cutting a message into packets

A message is cut into packets of at most `PMTU` bytes:

- ONLY or FIRST/MIDDLE/LAST opcodes;
- RETH on the first packet;
- AckReq on the last packet.

For each packet the merger emits one *descriptor*:

- the payload source: host WRITE bus, host READ RESPONSE bus, retransmission buffer, or none;
- the buffer address;
- the byte count;
- the full header metadata, with remote IP/QPN/port from `conn_table` and PSN from
  `state_table`.

### Buffer regions and replay

Each host WRITE message and each READ RESPONSE gets a region of the retransmission buffer, which
is allocated as a ring of beats. Each host message (WRITE or READ) is also recorded in a per-QP
replay record. A lost READ RESPONSE is recovered by the requester, which sends its READ again. The
record holds:

- the opcode class;
- the first PSN;
- the remote address;
- the length;
- the buffer base.

A NAK or a timeout replays the QP's recorded message *go-back-N*:

- It restarts at the oldest unacknowledged PSN `una`.
- The packet index is `una − first PSN`. The replay rebuilds the address, the length and the
  FIRST/MIDDLE/LAST opcode for that index.
- Payload comes from the buffer, never from the host again.

A READ request that was lost is simply sent again, because it has no payload.

### Payload release and header building

`retrans_mux` turns descriptors into payload streams:

- For a host source it forwards the host beats and writes each one into the buffer at the
  descriptor's address.
- For a retransmission it reads the beats back from the buffer.

After the mux, header stages are added in turn: `exh_tx` (RETH or AETH), `ibh_tx` (BTH),
`udp_tx` and `ipv4_tx` (with header checksum). `icrc` then appends the CRC.

## 4. ICRC at one beat per cycle

The invariant CRC is the Ethernet CRC-32 computed over:

- eight 0xFF bytes;
- then the IP packet, with the fields that routers may rewrite replaced by 0xFF. These are bytes
  1 (DSCP/ECN), 8 (TTL), 10–11 (IP checksum), 26–27 (UDP checksum) and 32 (BTH reserved byte).

The result is complemented and appended least-significant byte first.

### The problem

A running CRC must absorb one beat per cycle. The last beat of a packet can hold any multiple of
4 bytes, and a single CRC circuit for "any length up to 64 bytes" is deep. Instead the unit sorts
beats into three classes by how full they are, each with its own circuit:

- **CRC512**: full 64-byte beats, one cycle, feeding the running value back. These are all
  non-last beats and full last beats.
- **CRC320**: a last beat of exactly 40 bytes, in one shot. With 40 bytes of IP/UDP/BTH and a
  4096-byte payload, this is the tail of every MTU-sized non-first packet.
- **CRC32_0 … CRC32_15**: a 16-stage pipeline for any other last beat. Each stage folds one
  32-bit word or passes the value on.

### Ordering and insertion

Every last beat walks through all 16 stages whichever circuit it used, so results leave in packet
order. Meanwhile the data waits in a 32-beat FIFO. When a packet's last beat leaves the FIFO, the
CRC is inserted after the last valid byte. If the beat is full, one extra beat is created.

The masking of variant fields happens on the first beat, before any CRC circuit. The eight
leading 0xFF bytes are folded into the initial value, which is computed by a constant function.

### Cost and checking

Sustained throughput is one beat per cycle plus at most one extra beat per packet. The block
testbench moves ten 4 KiB packets (650 beats) through in 668 cycles.

Received ICRCs are stripped but not checked. The Ethernet FCS checked by the MAC covers the same
bytes on a single link.

## 5. Flow control on the command path

Host commands enter `flow_control`:

- It holds a request FIFO of `REQ_DEPTH` entries and a per-QP count of packets in flight.
- The command at the head is forwarded when its QP has room for all its packets: `used +
  packets <= BUDGET`. Forwarding adds its packets to `used`.
- Ack events subtract the acknowledged packets.
- A message longer than `BUDGET` packets is let through once the QP has nothing outstanding, so
  it can never deadlock.
- While the head waits, the `fc_stall` output is high.

The FIFO is shared, so a blocked QP holds back the QPs behind it. This is the simplest queue
that does the job; per-QP queues would remove the blocking. Since the budget logic is one
comparison, a congestion-control scheme can replace it in place.

## 6. Receive crediting

Payload that cannot be taken should not be allowed to back up the receive pipeline, because
ACKs for our own traffic travel through it. `payload_dropper` keeps a credit counter: one credit
per 64-byte beat of free host-side capacity, `CREDITS` beats initially.

- A WRITE or READ RESPONSE packet is admitted only if its beats are covered by the credits, and
  is otherwise dropped whole.
- The host returns a credit (`credit_ret`) for each beat it drains.

The dropper sits *in front of* the PSN check, so a dropped packet leaves the PSN state untouched.
It then looks like a gap, the receiver NAKs, and the sender replays it. The cost is that a packet
admitted here can still be discarded by the PSN check, for example as a duplicate. Its credits
are then refunded from `ibh_rx`.

## 7. Transport timer

`transport_timer` holds, per QP, an armed flag and the cycle at which it was (re)started:

- A packet sent on an idle QP arms the timer.
- An ACK that makes progress restarts it.
- An ACK that leaves nothing outstanding stops it.

A scan pointer visits one QP per cycle. An entry older than `TIMEOUT` cycles emits a timeout that
triggers the go-back-N replay of that QP and restarts the timer. Detection is therefore late by up
to `NQP` cycles, which is small against the default of 65,536 cycles (262 µs at 250 MHz). Only a
single comparator is needed.

## 8. Per-QP tables

All tables are arrays of `NQP` entries (default 500) with combinational reads. They are set up by
`setup_valid` with a `qp_setup_t`.

| table | contents | users |
|---|---|---|
| `state_table` | expected RX PSN, NAK-sent flag, next TX PSN, oldest unacknowledged PSN | `ibh_rx` (RX port), `req_merger` (TX port) |
| `conn_table` | remote IP, remote QPN, remote UDP port | TX header building |
| `msn_table` | MSN of completed received messages, running write address of a multi-packet WRITE | `exh_rx`, AETH of ACKs |
| `rd_req_table` | local address of the outstanding READ, advanced per response packet | `exh_rx` |

The tables are only ever written with `always_ff` and read through `assign`. A synthesis tool can
therefore map them to distributed or block RAM; the latter needs a registered read, which the
pipeline does not yet provide.

## 9. Parameters

| parameter | default | meaning | origin |
|---|---|---|---|
| `NQP` | 500 | queue pairs in every per-QP table | from the paper |
| `PMTU` | 4096 | payload bytes per packet | the MTU used in the paper's evaluation |
| `BUF_AW` | 12 | retransmission buffer: 4096 beats = 256 KiB | own choice (the paper uses an HBM channel) |
| `CREDITS` | 1024 | receive credits in beats (64 KiB) | own choice |
| `TIMEOUT` | 65536 | retransmission timeout in cycles | own choice |
| `BUDGET` | 64 | packets in flight per QP | own choice |
| `REQ_DEPTH` | 32 | flow-control request FIFO | own choice |
| `FIFO_AW` (icrc) | 5 | 32-beat data FIFO in the ICRC unit | own choice |

### Capacity

A 32 kB message is eight 4 KiB packets. It fits the budget and one eighth of the buffer. The
paper's throughput test issues batches of 64 such messages, 2 MiB in all. That is more than the
256 KiB on-chip ring can hold, and flow control does not stop it.

## 10. Where this departs from the source design

- The original packet pipeline is written in HLS; this one is hand-written RTL with the same
  block boundaries. Latencies per stage are therefore not comparable.
- The retransmission buffer is on-chip and is a plain ring. Nothing stops a new message from
  overwriting the region of an older one that is still unacknowledged. This happens once more
  than `2^BUF_AW` beats are in flight across all QPs; with the defaults, keep `BUDGET × PMTU ×
  active QPs` below 256 KiB. An HBM-backed version with a free list would remove the limit.
- Only one message per QP can be replayed: the replay record holds the QP's latest message. If a
  NAK or timeout concerns an earlier message that is still outstanding, the replay finds the
  oldest unacknowledged PSN outside the record and is skipped; that message is then not resent.
  Flow-control budgets larger than one message per QP therefore rely on losses being rare.
- Only one READ per QP may be outstanding (read request table).
- ACKs are generated before the payload is in host memory (see 2).
- The received ICRC is not checked, and the received IP header checksum is not checked.
- There is no SEND/RECEIVE, no atomics, no congestion control (ECN/CNP), no Ethernet framing, no
  VLAN and no IPv6.
- The user-application offload slots are not part of this RTL. In the original system they sit
  between the stack and the host. The same applies to the services built on them (AES encryption
  of payloads, an ML classifier for deep packet inspection, a packet sniffer and preprocessing
  pipelines) and to direct-to-GPU DMA. The host-side ports of `balboa_top` are where such a slot
  would be inserted.

## 11. Files

`rtl/`:

- `balboa_pkg` holds the shared types.
- One module per file, named as in the picture above. `roce_stack` groups the packet pipeline
  with its tables and timer; `balboa_top` adds flow control, the retransmission mux and buffer
  and the ICRC unit.

`tb/`:

- There is a self-checking testbench per block (`tb_<module>.sv`). Each uses `$urandom`
  stimulus, reference models written in the testbench, and a watchdog. Each prints
  `TB_RESULT checks=… failures=…`.
- `tb_util_pkg` builds reference headers.
- `tb_host` models host memory and DMA.
- `tb_channel` models a lossy link. It checks the ICRC of every packet against an independent
  bitwise CRC and can drop chosen packets.
- `tb_balboa_top` connects two reduced-size stacks through two channels. It runs WRITEs and READs
  with forced losses, and counts each mechanism:
  - header drops;
  - PSN drops;
  - credit drops;
  - timeouts;
  - NAKs;
  - replays;
  - flow-control stalls;
  - ICRC-checked packets.
- `tb_balboa_full` runs two stacks at all default parameters. It does an 8 KiB WRITE and a 4 KiB
  READ and compares the remote memory byte for byte.

### Simulating one testbench with Verilator 5

```
verilator --binary --timing --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb rtl/balboa_pkg.sv tb/tb_util_pkg.sv tb/tb_balboa_top.sv \
  --top-module tb_balboa_top -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Block testbenches need only `rtl/balboa_pkg.sv` (and `tb/tb_util_pkg.sv` where imported) plus
`-y rtl -y tb`.
