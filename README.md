# Dagger NIC in SystemVerilog: an RPC stack offloaded onto a memory-attached FPGA

Cloud microservices talk to each other with very small remote procedure calls (RPCs), mostly
under 64 bytes. For messages that small, a software RPC layer over a kernel or user-space
TCP/IP stack is mostly overhead. A PCIe NIC adds more on top, because every message costs
doorbells, MMIO writes and DMA round trips. Dagger moves the whole RPC stack into an FPGA NIC and
connects it to the CPU over a cache-coherent memory interconnect (Intel UPI, exposed to FPGA logic
as the CCI-P interface) rather than over PCIe:

- The host program writes each RPC as one 64-byte cache line into a ring in its own memory.
- The NIC finds new RPCs by polling those rings with coherent reads.
- The NIC delivers incoming RPCs by writing cache lines into receive rings that the host polls.

Nothing on the data path uses MMIO or interrupts. MMIO is only used for configuration.

This repository holds synthesizable RTL for that NIC:

- the host-interface state machines;
- the TX path, with its request table, per-flow FIFOs, scheduler and batching transmitter;
- the RPC unit, with a connection cache, serializer, deserializer and load balancer;
- a UDP/IPv4 transport;
- a soft-configuration register file and statistics counters;
- the multi-NIC wrapper: several NIC instances share one CCI-P port through a round-robin arbiter
  and reach each other through a small top-of-rack switch.

Each block has a self-checking testbench. The whole FPGA is tested end to end at its default
size.

The published description of Dagger covers its architecture and its measured results well. It is
much thinner on cycle-level detail. Every encoding, handshake, register map and ring format here
is this implementation's own choice, made where the description is silent. Each source file's
opening comment says which parts follow the published design and which are choices made here.
Section 9 lists where this RTL departs from the published design.

## 1. Where the RTL sits

```
 host memory (rings)                 dagger_fpga
 ──────────────┐   CCI-P   ┌────────────────────────────────────────────────┐
 TX rings      │◄─────────►│ ccip_arbiter ──► dagger_nic[0] ─┐              │
 TX free buf   │  reads,   │   (round-robin,   dagger_nic[1] ─┤ tor_switch   │
 RX rings      │  writes,  │    tag routing,   ...           ─┘ (static IP   │
 RX free buf   │  MMIO     │    MMIO decode)                     table)     │
 ──────────────┘           └────────────────────────────────────────────────┘
```

The following are outside the RTL and appear only as ports:

- the CCI-P/UPI stack and its 128 KB host-coherent cache (HCC);
- the Ethernet PHY;
- clocking;
- the host software.

The top, `dagger_fpga`, therefore has a single CCI-P port (read request, read response, write
request and MMIO) and a switch address table as its ports.

Inside each `dagger_nic` the RPC pipeline runs left to right for outgoing RPCs and right to left
for incoming ones:

```
           rx_fsm ──► rpc_unit (conn. lookup A, serializer) ──► transport TX ──► switch
 host ◄──  tx_path ◄── rpc_unit (deserializer, conn. lookup B, load balancer) ◄── transport RX ◄──
           soft_config (MMIO)  connection_manager (1 write, 3 read ports)  packet_monitor
```

There are small FIFOs between the RPC unit and its neighbours. A NIC is symmetric: the same
hardware carries requests and responses, and the `rtype` field of each RPC tells them apart. A
client and a server use identical NICs.

## 2. The host rings and the phase bit

The CPU and the NIC share four structures per NIC. Their locations in host memory are set over
MMIO. Addresses are in 64-byte line units.

| Structure | Location for flow *f* | Who writes it | What a line holds |
|---|---|---|---|
| TX ring | `tx_base + f*tx_ring_size + i` | host | one RPC object |
| TX free buffer | `tx_free_base + f` | NIC | [31:16] running count of entries the NIC has taken, [15:0] index taken |
| RX ring | `rx_base + f*rx_ring_size + i` | NIC | one RPC object |
| RX free buffer | `rx_free_base + f` | host | [15:0] running count of entries the host has consumed |

Each *flow* is one ring pair. In the published design a flow is normally one host thread. The
default configuration has 64 flows, a 10-entry TX ring and a 4-entry RX ring per flow. The TX ring
size is about the desired per-flow rate times the 0.8 µs it takes for an entry to be fetched and
released. The RX ring holds one batch.

**How a reader tells a new entry from an old one without a doorbell.** Bit 0 of the object's
control byte is a *phase bit*:

1. The writer sets it to 1 on its first lap around the ring, to 0 on the second lap, and so on.
2. The reader keeps the phase it expects for its current lap.
3. A polled line whose phase bit differs from the expected phase is stale, and the reader polls it
   again.

Rings start zeroed, so the first lap carries phase 1.

The running counts in the two free buffers give the writer flow control: a writer may run ahead by
at most the ring size. Both directions use the same scheme:

- The host writes TX rings and the NIC (`rx_fsm`) reads them.
- The NIC (`ccip_transmitter`) writes RX rings and the host reads them.

The counts are 16 bits wide and compared modulo 2^16.

## 3. Fetching RPCs: `rx_fsm` and the polling-mode switch

`rx_fsm` visits flows round-robin. Each flow has a *poll pointer* that runs ahead of its head:
on each visit the FSM issues a CCI-P read of the entry at the poll pointer and advances it. A flow
may have up to 8 polls in flight, and never more than its ring size. One read takes 400 ns
(80 cycles), so a single flow can fetch up to 8 RPCs per 80 cycles. That is about 20 Mrps, above
the 12.4-16.5 Mrps per core of the published prototype. The block's testbench measures 192 RPCs in
2000 cycles on one busy flow.

- The CCI-P tag carries the flow number and a 3-bit sequence number. The FSM keeps, per flow and
  sequence number, the ring entry that poll reads.
- The number of reads in flight plus results waiting in its output queues is bounded by
  `OUT_DEPTH = 128`, the CCI-P limit of 128 outstanding requests. A response therefore always
  finds room, and the read-response channel needs no back-pressure.

When a response arrives, the FSM looks up which entry it read:

- **The entry is the head and its phase bit matches (a new RPC):** the object and its flow go to
  the RPC unit. The head advances, flipping the expected phase on wrap. A bookkeeping line is
  queued for the TX free buffer.
- **Otherwise:** the line was stale (not yet written by the host) or arrived before the head's.
  It is dropped, and the poll pointer is rewound to that entry, so it is read again. RPCs of one
  flow therefore leave in ring order, even if reads return out of order.

The rewind is the subtle part. One stale line at entry *k* means the polls already in flight for
*k+1*, *k+2*, ... are probably stale too. Those polls are repeated anyway after the rewind. If
each of their responses rewound the pointer again, the flow would keep restarting its window and
its rate would collapse. To prevent this, every rewind bumps a 2-bit per-flow *epoch*, and each
poll records the epoch it was issued in. Only responses from the current epoch may rewind. An
older response can still be accepted if it holds the head and its phase matches, since its data
is then valid.

**Polling mode.** The CCI-P read hint selects between two kinds of read:

- a read through the FPGA-side coherent cache (HCC), which is cheap while a ring is idle;
- a direct read of the processor's last-level cache, which is faster under load because it skips
  HCC invalidation traffic.

`rx_fsm` counts the RPCs it accepts in windows of `LOAD_WINDOW = 1024` cycles. At the end of each
window it compares the count with the programmable `poll_threshold` (default 256, i.e. 0.25 RPC per
cycle). Above the threshold it uses direct reads for the next window; otherwise it uses cached
reads. Each change pulses `ev_mode_switch`.

## 4. Delivering RPCs: the TX path

The TX path (`tx_path`) takes RPC objects with a chosen flow from the RPC unit and writes them into
the host RX rings, in batches of `B` lines (default `B = 4`, settable from 1 to 4).

**Input controller.** It takes a free slot id from `free_slot_fifo`, stores the object in
`request_buffer` at that slot, and pushes the slot id onto the flow's FIFO in `flow_fifos`:

- `request_buffer` has `B*N_flows` = 256 entries.
- `flow_fifos` has 64 FIFOs. Each is `2B` deep, so a flow can collect its next batch while the
  current one is sent.
- Only 8-bit slot ids move through the FIFOs, never the 64-byte objects.
- If no slot is free or the flow's FIFO is full, the input is held (`in_ready` low) and
  `ev_stall` pulses. This back-pressure propagates to the RPC unit and the network receive side.

**Flow scheduler.** It grants, round-robin, a flow whose FIFO holds at least `B` slot ids and
whose RX ring has room for `B` more entries. A partial batch waits: there is no timeout. Section 9
explains why, and what host software does about it.

**CCI-P transmitter.** For the granted flow it pops `B` slot ids one after another and reads each
object from the request buffer (one cycle). It then writes the object to the ring entry at the
flow's write pointer, with the phase bit set, and returns the slot to the free-slot FIFO.

Ring credit is `rx_ring_size - (written - freed) >= B`. The transmitter keeps `freed` by polling
the RX free buffer: when a flow has a full batch waiting but no credit, it issues a direct read of
that flow's free-buffer line, at most one per flow in flight. The response refreshes `freed`.

## 5. The RPC unit and the connection cache

`connection_manager` is the NIC's connection table:

- It is direct-mapped: the low 16 bits of a 32-bit connection id index 65536 entries. The upper
  bits are kept as a tag, so a lookup of a connection that is not cached misses instead of
  aliasing.
- Each entry holds the destination (IPv4 address and UDP port), the flow the connection belongs to
  on this NIC, and its load-balancing scheme.
- It has one write port and three independent read ports, all with one cycle of latency:
  - port A serves outgoing RPCs (destination);
  - port B serves incoming RPCs (flow and scheme);
  - port C serves the configuration interface.
- After reset it clears its valid bits at one entry per cycle. That takes 65536 cycles at the
  default size, and the NIC stays disabled until it finishes.

`rpc_unit` has one pipeline register per direction, which holds the RPC during the one-cycle
lookup. While that register is stalled, the table is re-read with the held connection id, so the
lookup result always belongs to the held RPC.

**Outgoing RPCs.** The serializer attaches the destination from port A and clears the control
byte. It clamps `arg_len` to the 48 argument bytes of one line and zeroes the bytes beyond it.

**Incoming RPCs.** The deserializer rejects payloads whose type is not request or response, whose
`arg_len` is over 48, or whose padding is not zero. Accepted payloads go through port B, then the
load balancer picks the host flow:

- **Response:** always the connection's own flow, so an answer returns to the thread that asked.
- **Request, round-robin scheme:** the next active flow.
- **Request, static scheme:** the connection's flow.
- **Request, object-level scheme:** a multiplicative hash of the first 8 argument bytes (the key of
  a key-value request), `h = (k_hi ^ k_lo) * 0x9E3779B1; h ^= h >> 16`, scaled to the number of
  active flows as `(h[15:0] * num_flows) >> 16`. Requests for one key therefore always reach the
  same server thread.

RPCs on connections that are not cached are dropped and counted (`EV_CONN_MISS`). Fetching
missing entries from host memory is not modelled.

## 6. Transport and the switch

`transport` wraps each 64-byte payload in a 20-byte IPv4 header and an 8-byte UDP header:

- TTL 64, don't-fragment set, incrementing IP id, UDP checksum 0;
- the IPv4 header checksum computed as the one's complement of the one's-complement sum.

On receive it checks the IP version, header length, protocol, header checksum, destination
address and destination port. Frames that fail any check are dropped and counted. There is no
Ethernet header: the network side is a stream of IP frames, since the PHY and MAC are outside the
RTL.

`tor_switch` connects the NIC instances on one FPGA:

- A static table (an input port) gives the IP address behind each port.
- Each frame goes to the port whose address it names. Frames to unknown addresses are dropped
  (`sw_drop`).
- Each output has one register. Contending inputs are served round-robin (`sw_contend`).

`ccip_arbiter` shares the CCI-P read and write request channels among the NICs round-robin:

- It stamps the NIC number into the 3-bit NIC field of each read tag, so up to 8 NICs can share
  the port. It routes read responses back by
  that field.
- It decodes MMIO addresses as `{nic[3:0], register[7:0]}`.

## 7. Soft configuration (MMIO map of one NIC)

Registers are 64 bits wide. A read response arrives one cycle after the read. Out-of-range values
are clamped.

| Addr | Register | Notes |
|---|---|---|
| 0x00 | enable | the NIC also waits for the connection table's clear sweep |
| 0x01 | num_flows | 1..64, default 64 |
| 0x02 | batch | 1..4, default 4; lower it at light load (Section 9) |
| 0x03 / 0x04 | TX / RX ring size | 1..64 entries, default 10 / 4 |
| 0x05-0x08 | tx_base, tx_free_base, rx_base, rx_free_base | line addresses |
| 0x09 | poll_threshold | RPCs per 1024-cycle window, default 256 |
| 0x0A | local address | [31:0] IPv4, [47:32] UDP port |
| 0x10 | CONN_ID | connection id for the next command |
| 0x11 | CONN_TUPLE | [8:0] flow, [10:9] scheme (0 round-robin, 1 static, 2 object), [47:16] IPv4, [63:48] port |
| 0x12 | CONN_CMD | write 1 to open (or overwrite) CONN_ID with CONN_TUPLE, 0 to close it |
| 0x13 | CONN_QUERY | write a connection id to look it up |
| 0x14 | CONN_STATUS | [63] done, [62] hit, [10:9] scheme, [8:0] flow |
| 0x15 | CONN_DEST | [31:0] IPv4, [47:32] port |
| 0x20+i | counter *i* | see below |

The counters in `packet_monitor` are saturating 32-bit counters:

| Counter | Event |
|---|---|
| 0 | RPC fetched from the host |
| 1 | RPC delivered to the host |
| 2 | frame sent |
| 3 | frame received |
| 4 | frame dropped |
| 5 | connection miss |
| 6 | TX-path stall |
| 7 | polling-mode switch |

## 8. Parameters, timing and files

The whole design is one clock domain: 200 MHz in the published prototype. It uses a synchronous,
active-low reset. Top-level parameters and defaults:

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_NICS` | 2 | NIC instances, as in the loop-back set-up of the evaluation |
| `NUM_FLOWS` | 64 | flows per NIC; the package sizes fields for up to 512 |
| `N_CONN` | 65536 | connection-cache entries |
| `MAX_BATCH` | 4 | largest CCI-P batch `B` |

`rtl/dagger_pkg.sv` defines the shared types:

- the 64-byte RPC object: a 16-byte header holding the control byte, type, function id,
  connection id, RPC id and argument length, followed by 48 argument bytes;
- the CCI-P request and response structs and the tag layout;
- the IPv4 and UDP headers;
- the configuration struct;
- the event numbering.

Every other file in `rtl/` holds one module, named after the file. Steady-state latencies:

- the RPC unit adds one cycle per direction;
- the transport adds one cycle per direction;
- the switch adds one cycle;
- a TX-path batch takes `B` writes plus one cycle.

Throughput is bounded by host reads. See Section 9.

**Simulating.** The testbenches are in `tb/`. Each is named `<block>_tb.sv` and prints
`TB_RESULT checks=<n> failures=<m>`. `tb/host_mem_model.sv` is a behavioural model of host memory.
It has a configurable read latency (80 cycles = 400 ns by default) and up to 128 reads in flight.
It also plays the host software: it writes TX rings with phase bits and consumes RX rings while
publishing free counts. A typical run:

```
verilator --binary --timing --assert -Irtl rtl/dagger_pkg.sv -y rtl -y tb \
          tb/dagger_fpga_tb.sv --top-module dagger_fpga_tb -o sim
obj_dir/sim
```

`dagger_fpga_tb` runs the top at its default size, with no parameter overrides: two 64-flow NICs
with 65536-entry connection caches. It takes about one minute, most of it in the 65536-cycle
table sweep. NIC 0 serves a client and NIC 1 a server; connections are opened over MMIO. It runs
four phases:

1. heavy load;
2. a phase where the client stops reading (ring credit runs out and the TX path stalls);
3. light load with the batch size lowered to 1;
4. a drain.

It checks every answer and compares the MMIO counters with its own counts. It also counts each
mechanism and fails if any of them never happened:

- batches and credit polls;
- stalls;
- polling-mode switches in both directions;
- connection misses;
- switch drops;
- switch and arbiter contention;
- all three load-balancing schemes.

It prints the round-trip time of a lone RPC. That is about 1500 cycles (7.4 µs) here, for the
reasons in Section 9.

## 9. Where this RTL departs from the published design, and its limits

- **One RPC per cache line.** Objects are single 64-byte lines, with at most 48 argument bytes.
  The published design supports larger, multi-line RPCs; that path is not built.
- **Polling depth is this design's own.** The published text does not say how many TX-ring
  entries a flow polls at once. Here it is up to 8 per flow, and 128 in total over all flows. With
  all 64 flows enabled, the 128-read limit leaves about 2 reads per flow per 80 cycles. The
  single-core and 4-thread rates of the published evaluation assume that `num_flows` is set to the
  number of active threads. The 42 Mrps multi-thread rate was worked out, not simulated end to
  end.
- **Partial batches wait.** The published text says the pipeline waits for a full batch at low
  load and that software changes the batch size at run time through soft configuration. The RTL
  does exactly that and nothing more. A host that leaves `B = 4` at light load can leave up to
  three RPCs per flow waiting until more arrive. The end-to-end testbench lowers `B` to 1 for its
  light-load phase.
- **Connection-cache misses drop the RPC.** The published design backs the cache with host memory
  through the HCC. Here a miss is counted and the RPC dropped. The host is expected to open
  connections over MMIO first.
- **The Protocol block is omitted.** The published Protocol block does nothing in the evaluated
  configuration: it forwards every packet. It is left out rather than built as a pass-through.
- **Simplified framing and switching.** Frames carry no Ethernet header. The switch forwards by IP
  address rather than by MAC address.
- **No PCIe interfaces.** The doorbell, doorbell-batching and MMIO-transfer interfaces over PCIe
  were only baselines in the published evaluation and are not built.
- **HCC modelled only as a read hint.** The HCC itself is part of the vendor shell. It appears only
  as the cached/direct read hint.
- **Round-trip time.** A lone RPC takes about 1500 cycles. That comes from:
  - TX-ring polling visiting all 64 flows in turn;
  - reads through an 80-cycle memory model on both NICs;
  - credit reads of the RX free buffer.

  The published prototype's round trip is about 2 µs.
- **Workload fit.**
  - 64-byte RPC microbenchmarks fit.
  - Key-value requests with 8-byte or 16-byte keys fit: a 16-byte key with a 32-byte value exactly
    fills the 48 argument bytes. The object-level balancer hashes the first 8 key bytes.
  - The 8-tier Flight Registration service on one FPGA needs `NUM_NICS = 8`. The arbiter's 3-bit
    NIC field allows up to 8 NICs, but only 2 are simulated.
