# Dagger: an RPC NIC on a memory interconnect

Microservices exchange huge numbers of tiny RPCs, most of them well under a
kilobyte and many a single 64-byte cache line. On a PCIe NIC every such
message costs an MMIO doorbell plus DMA transactions, and the software RPC
layer (serialization, matching responses to requests, transport headers)
costs CPU cycles on top of that. Dagger moves the whole RPC stack into an FPGA
NIC and attaches that NIC to the processor over a cache-coherent memory
interconnect (Intel UPI, seen from the FPGA through the CCI-P interface)
instead of PCIe.

The host and NIC then share ordinary memory. Software writes a 64-byte RPC
object into a ring in its own memory and never rings a doorbell. The NIC finds
the new object by polling that memory through the coherent interconnect.
Received RPCs are written back into host memory as DMA cache-line writes.

This repository holds synthesizable SystemVerilog for the NIC side:

- the two CPU-NIC interface state machines;
- the RPC unit;
- a UDP/IPv4/Ethernet transport;
- a request load balancer;
- the connection manager, packet monitor and soft-configuration registers;
- an evaluation top with two NICs sharing one CCI-P port, their network ports
  joined in loop-back.

Self-checking testbenches with host-memory and host-software models are in
`tb/`.

## The RPC pipeline

Each NIC (`dagger_nic`) is a three-layer pipeline. Every stage takes one RPC
per clock in each direction.

```
 host memory                                                     network
 TX rings ──CCI-P rd──► tx_fsm ─► rpc_unit ─► udp_transport ─► net_tx
 TX cmpl  ◄─CCI-P wr──┘            (serialize,  (Eth/IPv4/UDP
                                    metadata)    headers, csum)
 RX rings ◄─CCI-P wr── rx_fsm ◄─ load_balancer ◄─ rpc_unit ◄─ udp_transport ◄─ net_rx
 RX bk    ──CCI-P rd──┘                           (deserialize,  (check, strip)
                                                   match resp.)
```

Around the pipeline sit three more units, all reached by MMIO:

- `conn_manager` holds the connection table;
- `packet_monitor` holds the statistics counters;
- `soft_reg_file` holds the run-time configuration.

`tx_fsm` and `rx_fsm` share the NIC's single CCI-P port through a round-robin
`ccip_mux`.

The CPU-NIC interface is the layer that makes the design what it is, and the
hardest part to follow. The next three sections cover it.

## Shared rings and the dirty bit

Every connection owns four structures in host memory, all made of 64-byte
lines:

| structure | line address | written by | read by |
|---|---|---|---|
| TX ring, 2^`ring_log2` entries | `tx_ring_base + (conn << ring_log2) + i` | software | NIC (polling) |
| TX completion line | `tx_cmpl_base + conn` | NIC | software |
| RX ring, 2^`ring_log2` entries | `rx_ring_base + (conn << ring_log2) + i` | NIC (DMA write) | software |
| RX bookkeeping line | `rx_bk_base + conn` | software | NIC |

Both sides keep free-running 16-bit counters of how many entries they have
produced and consumed. Index `i` is the low `ring_log2` bits of a counter.
Bit `ring_log2` is the lap bit: it flips each time the ring wraps.

**Dirty bit encoding.** Every RPC object carries a dirty flag in bit 0. The
producer writes the entry with `dirty = ~lap`. The consumer treats an entry
as new when its dirty flag differs from the lap bit of the consumer's own
counter.

- An entry that has not been rewritten since the last lap still holds the old
  polarity, so it reads as stale.
- No one ever has to clear a flag.
- A ring starts all-zero. On the first lap (lap bit 0) new entries carry
  dirty = 1.

**Completion and bookkeeping lines.** The consumed count is in bits [15:0].

- Software learns free TX entries from the completion line. It may reuse a
  slot once `produced - completed < ring size`.
- The NIC learns free RX entries the same way from the bookkeeping line.

## TX path: batched polling and the polling-mode switch (`tx_fsm`)

**Poll engines.** The FSM holds `NUM_ENG` (default 4) poll engines. Engine
`e` owns the connections `c` with `c mod NUM_ENG == e`, so each connection is
always served by the same engine, in order. Different engines overlap their
memory round trips, which is what lets throughput grow with the number of
connections. The engines share the read channel, the write channel and the
output stream through round-robin grants. A grant stays with its engine while
its request waits.

**Polling loop.** Each engine visits its open connections round-robin. For
each one it does the following:

1. Issue **B** line reads for entries `head .. head+B-1`. B is the
   soft-configured batch size, 1 to 4. It is sampled at the start of each
   poll, so software may change it at any moment.
2. Collect the read responses, which the interconnect may return in any
   order. The mdata tag `{engine, slot}` says which slot each one fills.
3. Once all B are back, hand the entries on in ring order, up to the first
   one that is not new. `head` advances by the number taken.
4. If anything was taken, issue one CCI-P write of the new `head` to the
   connection's completion line. This is the TX bookkeeping step, which
   releases the fetched entries to software.

A larger B amortizes round trips over more RPCs. That raises throughput but
adds latency at low load, because a poll waits for all B reads. B is a
register so that software can retune it on the fly.

**Polling-mode switch.** Each poll read carries a cache hint.

- At low request rates the reads go through the NIC-side coherent cache
  (`cached = 1`). Repeated polls of an unchanged line then stay local until
  the CPU's write invalidates it.
- At high rates this costs a miss on nearly every poll. The FSM therefore
  counts RPCs fetched per window of `WINDOW` cycles (default 1024).
- When a window's count reaches `POLL_THRESH`, the FSM switches to reading the
  CPU's last-level cache directly (`cached = 0`).
- It switches back after a window that stays below the threshold.
- The current mode can be read at register 0x30. Every switch counts in the
  monitor.

Each engine steps through IDLE → ISSUE → WAIT → DRAIN → BOOK. The
`a_*` assertions in the file state the handshake rules it relies on.

## RX path: DMA writes, back-pressure and asynchronous bookkeeping (`rx_fsm`)

**Writing.** Received RPCs arrive with a target connection chosen by the load
balancer. Each becomes one CCI-P write to `rx_ring_base + (conn << ring_log2)
+ tail[conn]`, with the dirty flag set as above. The NIC never polls on this
side. The device-to-host direction always uses DMA writes.

**Free space.** For each connection the FSM keeps `tail` (entries written) and
`sw` (the last consumed count read from the bookkeeping line). A write is
allowed while `tail - sw < ring size`. Otherwise the object waits at the
input. That back-pressure propagates up the pipeline to the network port, and
`ev_stall` counts each cycle it lasts.

**Refreshing the consumed count.** Once the connection at the input has used
more than half its ring, the FSM queues one read of its bookkeeping line. The
response updates `sw`. Only one such read is outstanding at a time. This
refresh is asynchronous: writes continue while it is in flight, so a stall
happens only if the ring really fills.

## RPC unit (`rpc_unit`)

**RPC object layout.** An RPC is one 64-byte line:

| bits | field |
|---|---|
| 0 | dirty |
| 7:1 | flags; flag 0 = response |
| 15:8 | function id |
| 47:16 | rpc id |
| 63:48 | source connection |
| 79:64 | destination connection |
| 511:80 | 54-byte payload |

**Serialization.** On the wire the object is big-endian:

- bytes 0-1: destination connection;
- bytes 2-3: source connection;
- bytes 4-7: rpc id;
- byte 8: function id;
- byte 9: flags;
- bytes 10-63: payload, in the order software wrote them.

The dirty flag is host-side state and is not sent.

**Transmit.** On the way out the unit fills in the fields software cannot
know:

- the source connection, which is the TX ring the object came from;
- for a request, the destination connection, which is the peer connection
  from the connection table.

For each outgoing request it records `{valid, function id}` in a metadata
table. The table has `OUTSTANDING` (32) slots per connection, indexed by
`{connection, rpc_id[4:0]}`.

**Receive.** An incoming response is passed on only if the slot of its
destination connection and rpc id is valid and its function id matches. The
slot is then freed. Any other response is dropped and counted as unmatched.
Requests pass through.

**Rate.** One registered stage per direction, one RPC per cycle.

## Transport (`udp_transport`)

**Transmit.** Each RPC becomes one frame:

- a 14-byte Ethernet header;
- a 20-byte IPv4 header, with TTL 64, DF set, a running identification field
  and the header checksum;
- an 8-byte UDP header. The UDP checksum is 0, which IPv4 allows.
- the 64-byte serialized RPC.

That makes 106 bytes in one bus beat. Addresses come from the local-address
registers and the connection table.

**Receive.** A frame is accepted only if all of these hold:

- ethertype is IPv4;
- version/IHL is 4/5;
- protocol is UDP;
- the header checksum verifies;
- destination MAC, IP and port are this NIC's;
- the UDP length is 72.

Rejected frames are consumed and counted.

## Load balancing (`load_balancer`)

A server core is represented by one connection, whose RX ring that core polls.
When balancing is enabled (`LB_CTRL[0]`), each incoming **request** goes to
the next connection in round-robin order among those set in the mask
(`LB_CTRL[16 +: NUM_CONN]`) and also open. Requests are therefore spread
evenly over the cores.

Responses are never balanced. They go to their destination connection, which
is the client connection that sent the request.

With balancing off, every RPC goes to its destination connection. An RPC with
no open target is dropped, and `rx_fsm` consumes it without writing.

## Control plane

**Register map.** `soft_reg_file` takes 64-bit MMIO writes and reads. A read
response comes one cycle after the request.

| index | register |
|---|---|
| 0x000 | CTRL: [0] enable |
| 0x001 | BATCH (1..4; 0 reads as 1) |
| 0x002 | RING_LOG2 (up to 10) |
| 0x003..0x006 | TX ring, TX completion, RX ring and RX bookkeeping base line addresses |
| 0x007 | POLL_THRESH |
| 0x008 | LB_CTRL |
| 0x009..0x00B | local MAC, IP, UDP port |
| 0x010, 0x011 | connection staging: destination MAC; {peer connection, port, IP} |
| 0x012 | CONN_CMD: [17:16] 1 = set up, 2 = open, 3 = close; [15:0] connection |
| 0x013 | read: open-connection mask |
| 0x020..0x027 | read: monitor counters |
| 0x030 | read: polling mode |

**Connection table.** `conn_manager` holds one entry per connection (16 by
default). Set-up copies the staging registers into the entry and leaves the
connection closed. Open and close change only its state bit. Only open
connections are polled, balanced to or delivered to.

**Monitor counters.** `packet_monitor` keeps eight saturating 32-bit counters:

- RPCs sent and received;
- dropped frames;
- RX stall cycles;
- polling-mode switches;
- poll reads;
- unmatched responses;
- load-balancer drops.

## Evaluation top (`dagger_top`)

Two identical NICs share one CCI-P port through a round-robin `ccip_mux`.

- The mux marks each request with the winning client in an mdata bit (bit 15)
  and routes responses back by it.
- Inside each NIC, a second mux shares the port between the TX and RX FSMs,
  using mdata bit 14.
- NIC 0's network output feeds NIC 1's input and vice versa, so one machine
  runs client and server.
- MMIO register index bit 11 selects the NIC.

The top's ports are the CCI-P channels and MMIO. Everything on the far side of
those ports (the UPI endpoint and FPGA cache, the CPU and its LLC, and the
RPC software) is outside this RTL.

## Simulating

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
With plain verilator, for example:

```
verilator --binary -Wno-fatal --top-module tb_dagger_top -Irtl -Itb \
    rtl/dagger_pkg.sv tb/host_sw_pkg.sv rtl/*.sv tb/host_mem_model.sv tb/tb_dagger_top.sv
./obj_dir/Vtb_dagger_top
```

**Models in `tb/`.**

- `host_mem_model` is the host side of CCI-P. It has a configurable latency
  and jitter, returns read responses out of order, applies random
  back-pressure, and counts cached and direct reads.
- `host_sw_pkg` is the host memory plus the software ring operations: send,
  receive and reset.

**Block testbenches.** `tb_<block>` tests each block against
independently computed expectations. The RPC unit and transport testbenches
also check the one-RPC-per-cycle rate.

**End-to-end test.** `tb_dagger_top` runs the top at its default parameters.

- Client connections on NIC 0 send requests to a server on NIC 1. The server
  is load-balanced over several connections.
- The server echoes each request back. The client matches responses by rpc id.
- The test varies the batch size and the polling threshold.
- It stalls the server to force RX back-pressure.
- It injects a corrupted frame and an unsolicited response.

It counts how often each mechanism happened and fails if any never happened.
The mechanisms are batches above 1, polling-mode switches, load-balancer
spread, RX stalls, TX and RX bookkeeping, CCI-P arbitration between the NICs,
transport drops and unmatched responses. It runs in about a minute.

**Echo benchmark.** `tb_echo_workload` runs the 64-byte echo benchmark at
the top's defaults. It sweeps the batch size B (1, 2, 4) and the number of
client/server thread pairs (1, 4, 8), and adds a light-load run with one
request in flight. A final "auto" run starts at light load with B=1. Halfway
through, it raises the load and rewrites B to 4 while requests are in the
rings, as software would to trade latency for throughput. That run checks
that every RPC still arrives once and in order. It reports throughput in RPCs per 1000 cycles and the mean
round trip in cycles. Measured with a host memory of 16-19 cycles latency:

| threads | B=1 | B=2 | B=4 |
|---|---|---|---|
| 1 | 40 | 72 | 121 |
| 4 | 159 | 281 | 381 |
| 8 | 159 | 284 | 384 |

At light load the round trip is 30 cycles with B=1 and 42 cycles with B=4.
Larger batches buy throughput at the cost of low-load latency. Throughput
grows to four threads, one per poll engine, and is flat beyond. The test
checks these relations, not the absolute numbers, which depend on the memory
model.

## Where this design departs from the source architecture, and what it leaves out

- **Host-to-NIC mode.** Only the memory-interconnect polling mode is built.
  The PCIe MMIO and DMA-doorbell modes, which the architecture selects by
  reloading the FPGA, are not.
- **Threading model and provisioning.** Only the asynchronous model and
  connection-based buffer provisioning are built. The synchronous (blocking)
  model, which would drop the TX completion and bookkeeping traffic, is not.
- **TX completion.** Software learns released TX entries from a single
  completion line per connection that holds a running count. It is not a ring
  of completion entries.
- **RPC size.** Every RPC is a single 64-byte line. Larger RPCs (microservice
  requests reach about a kilobyte) would need multi-line objects, which are not
  built.
- **Chosen here, not specified by the architecture:**
  - the object layout, the added source-connection field and the wire format;
  - the per-connection metadata table;
  - the lap-parity dirty encoding and the completion and bookkeeping line
    formats;
  - the half-ring refresh rule;
  - the rate window length;
  - the four parallel TX poll engines;
  - the register map;
  - the transport header values and acceptance rule;
  - the use of connections to stand for server cores.
- **Connections.** The connection count (16) and the per-connection
  outstanding-request count (32) are not specified by the source either.
- **CCI-P.** The channels are simplified to valid/ready streams with a single
  cache-hint bit. The real interface uses almost-full flow control and richer
  request headers, so a thin adapter is needed to connect to a real FPGA
  interface unit.
- **Network.** The network side is a 106-byte frame per beat. A real MAC would
  need a width converter.
- **Rate.** The source reports a NIC clock of 400 MHz and a processing
  capacity of 200 million RPCs per second. The pipeline here takes one RPC
  per cycle, double that, but the shared CCI-P port limits the sustained
  rate. No timing analysis has been done at 400 MHz.
