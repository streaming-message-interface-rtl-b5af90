# SMI transport layer in SystemVerilog

FPGAs that are cabled to each other directly, through their QSFP network
ports, can exchange data without going through a host. For this to be
useful, the programs on them need something like MPI: numbered ranks,
point-to-point messages and collectives. They must also keep the FPGA's
streaming style, where a pipelined loop produces or consumes one element
per clock cycle. The Streaming Message Interface (SMI) offers exactly
that. An application opens a *channel*, naming a peer rank, a port number
and a length. It then pushes or pops elements one at a time, while the
hardware underneath turns them into packets, routes the packets across
intermediate FPGAs and hands them to the right endpoint.

This repository is an RTL implementation of the SMI transport and
interface layers of one rank (one FPGA). The design rests on three ideas:

* **Packet switching with a self-describing header.** Every 256-bit packet
  carries its source, destination, port, operation and element count. This
  lets many channels share the same wires and network ports without any
  circuit setup.
* **One pair of communication kernels per network port.** A send kernel
  (CKS) and a receive kernel (CKR) serve each port, and all kernels are
  fully interconnected. No single switch serialises all the traffic.
* **Routing tables loaded at run time.** The kernels forward by table
  lookup: the CKS by destination rank, the CKR by port. The same hardware
  therefore works on any cabling, and a rank that has no direct link to the
  destination forwards transit packets.

Collectives (broadcast, reduce, scatter, gather) are *support kernels*.
Each one sits between the application and the transport, like an endpoint,
and runs the rendezvous protocol of its collective.

## Packet format

Every packet is one 256-bit word: the width of the board's network I/O
channel.

| bits      | field   | meaning                                            |
|-----------|---------|----------------------------------------------------|
| [7:0]     | src     | source rank                                        |
| [15:8]    | dst     | destination rank                                   |
| [23:16]   | port    | SMI port: selects the endpoint at the destination  |
| [26:24]   | op      | 0 = SEND (data), 1 = SYNCH (rendezvous / credit)   |
| [31:27]   | nelem   | number of valid elements in the payload            |
| [255:32]  | payload | element *i* at bits `32 + i*W`                     |

With 32-bit elements a packet carries up to 7 elements. The header costs 1/8
of the link bandwidth: 35 of 40 Gbit/s are left for payload. The field
widths (one byte each for the ranks and the port, 3 bits for op, 5 bits for
nelem) are SMI's. The order of the fields and the op encodings are this
implementation's choice. All of it is defined in `rtl/smi_pkg.sv`
(`smi_hdr_t`, `smi_pkt_t`).

## The transport: CKS and CKR

```
            endpoints (push, pop, collectives) via FIFOs
                 |  ^                        |  ^
                 v  |                        v  |
   +-----+     +-----+  <->  other CKS  <->  +-----+     +-----+
   | CKR |<--->| CKS |   (3 FIFOs each way)  | CKS |<--->| CKR | ...
   +-----+     +-----+                       +-----+     +-----+
      ^           |                              |           ^
   port k in   port k out                     port j out  port j in
```

A rank has four kernel pairs, one per network port. The links are:

* **CKS inputs:** the application endpoints attached to it, its paired CKR
  (transit packets) and the three other CKS.
* **CKS outputs:** its network port, its paired CKR (packets for this rank)
  and the three other CKS.
* **CKR inputs:** its network port, its paired CKS and the three other CKR.
* **CKR outputs:** its application endpoints, its paired CKS and the three
  other CKR.

Every link is a FIFO (`smi_fifo`). Kernels therefore never have a
combinational path to each other, and every hop costs one cycle.

**Routing.**

* A **CKS** sends a packet whose `dst` is this rank to its paired CKR.
  Otherwise it looks `dst` up in its 256-entry table. The entry says either
  "my own network port" or "CKS number *n*", meaning: leave through port
  *n*.
* A **CKR** sends a packet whose `dst` is *not* this rank to its paired
  CKS, which takes care of the next hop. Otherwise it looks up `port`. The
  entry says either "application *a* of this CKR" or "CKR number *n*", which
  is the kernel the endpoint of that port hangs off.

The tables hold a kind (NET / CK / APP) and a 4-bit index
(`smi_rt_entry_t`). They are written through the `cfg_*` port of the rank,
one entry per cycle, at any time. Reprogramming them changes the topology
the design assumes without touching the hardware. The end-to-end testbench
first routes eight ranks as a linear bus and then over all links. The
routes must be free of cycles that could deadlock (a deadlock-free routing
scheme). Computing them is the host's job.

**R-polling** (`smi_poller`). A kernel looks at one input per cycle. If that
input has a packet that can leave, the kernel forwards it. The kernel keeps
reading the same input, up to R packets in a row, before it moves to the
next input in round-robin order. An empty input costs one cycle.

* With R = 1 a CKS with one endpoint polls 5 inputs. A single busy
  application therefore injects one packet every 5 cycles.
* With large R a single stream gets close to one packet per cycle, at the
  price of latency for the other inputs. R is a parameter (default 8).

A kernel also moves on when the packet at its current input is blocked
because the output FIFO it needs is full. This matters because kernels feed
each other in both directions. Suppose CKS0 holds a transit packet for
CKS1 and CKS1 holds one for CKS0, with both FIFOs between them full. If each
waited on its blocked input, neither would ever drain the other's FIFO.
Moving on lets each kernel eventually serve the input whose packet can
leave. An earlier version of this design waited, and it deadlocked in the
eight-rank test.

## Endpoints and channels

**`smi_push`** is a send channel. Opening it (`open_valid` with `count` and
`dst`) costs nothing on the network: the protocol is *eager*. Elements
arrive one per cycle. They are packed into a packet, which leaves when it is
full or when the last element of the message has arrived. The element that
completes a packet leaves in the same cycle, so a message streams at one
element per cycle. The endpoint stalls its application only when the
transport pushes back.

**`smi_pop`** is a receive channel. It unpacks packets into one element per
cycle and loads the next packet in the same cycle the last element of the
previous one leaves. Assertions check that arriving packets carry the
expected port and source rank.

Eager sending is safe because every link applies backpressure. A sender
that runs ahead simply fills the FIFOs (16 packets at each endpoint by
default) and then stalls. Correctness never depends on the FIFO sizes.

## Collectives

Each collective has its own support kernel and its own SMI port, so several
collectives can run at the same time. Every kernel contains both the root
and the non-root behaviour, and the root is named when the channel is
opened. All ranks open the collective with the same count and root.
Rendezvous messages are header-only `SYNCH` packets.

**Broadcast (`smi_bcast`).**

1. Each non-root rank sends the root one SYNCH ("ready").
2. The root collects all comm_size-1 notifications.
3. The root packs its application's stream. It sends each packet to every
   other rank in rank order, then packs the next packet.
4. Non-roots unpack what they receive.
5. The root's own application gets the data back on its output as well.

**Scatter (`smi_scatter`).** The root's application supplies
comm_size × count elements, rank 0's share first. The root serves the ranks
strictly in rank order:

* Its own share goes straight from its input to its output.
* For any other rank *r*, it waits for a SYNCH from *r*, then sends *r*'s
  share.

Notifications can arrive in any order, so the root remembers them in one bit
per rank.

**Gather (`smi_gather`).** This is the mirror image of scatter, with the
root granting. For each rank *r* in order, the root sends a SYNCH to *r*
and receives *r*'s count elements before it grants the next rank. Data from
different ranks can therefore never interleave, and the root's application
receives everything in rank order.

**Reduce (`smi_reduce`)** is the most involved of the kernels. Every rank
contributes count elements, and the root delivers their element-wise
combination (ADD, MAX or MIN). The root cannot hold whole messages, so the
message is cut into *tiles* of C elements (C = 64 by default), under
credit-based flow control:

* The root keeps C accumulators. When the channel opens, it sends each
  non-root rank one credit, a SYNCH packet that allows C elements.
* Non-roots stream their contributions, one element per packet, up to C per
  credit.
* Contributions of one tile can arrive from all ranks interleaved in any
  order. The root keeps, for each source rank, the tile slot where that
  rank's next element goes, and for each slot the number of contributions
  received so far. The first contribution to a slot initialises it, and the
  others are combined into it.
* A slot whose count reaches comm_size is complete. Results are forwarded to
  the application in element order.
* When all C slots of a tile have been forwarded and elements remain, the
  root sends every non-root rank a new credit.

In a cycle, the root accepts one contribution from the network or from its
own application, with the network first, and forwards one result. A
reduction of n elements costs (comm_size − 1) × ⌈n/C⌉ credit packets.

The data type is a build-time choice (parameter `DTYPE`):

* 32-bit integers.
* IEEE-754 single precision, the default. It uses the combinational adder in
  `smi_fp32_pkg`, which rounds to nearest even and handles subnormals,
  infinities and NaN. MAX and MIN compare the values as real numbers.

Floating-point addition is not associative, and contributions arrive in
whatever order the network delivers them. An FP32 sum can therefore differ
in the last bits from run to run, as it can with any parallel reduction.

## The rank: `smi_rank`

`smi_rank` is the top. It has four kernel pairs and eight endpoints.
Endpoint *e* serves SMI port *e* and sits on pair *e* mod 4:

| pair | endpoints (SMI port)                                    |
|------|---------------------------------------------------------|
| 0    | push + pop (port 0), broadcast (port 4)                 |
| 1    | push + pop (port 1), reduce, FP32 by default (port 5)   |
| 2    | push + pop (port 2), scatter (port 6)                   |
| 3    | push + pop (port 3), gather (port 7)                    |

Four point-to-point channels let a rank talk to all four of its neighbours
at the same time. A stencil code on a 2D torus does this when it exchanges
halos.

Programming a rank:

* The CKR table of pair *k* must map each port *p* (0–7) to "application
  ⌊p/4⌋" when *p* mod 4 = *k*, and to "CKR number *p* mod 4" otherwise.
* The CKS tables give, for each destination rank, the network port of the
  next hop: "NET" in the CKS of that port, "CK *n*" in the others.
* `my_rank` and `comm_size` are inputs.

The top's ports are:

* the four network ports as valid/ready streams of `smi_pkt_t`;
* the `cfg_*` table write port;
* for each endpoint, an open handshake plus one valid/ready element stream
  in each direction.

| parameter      | default  | meaning                                            |
|----------------|----------|----------------------------------------------------|
| R              | 8        | polling run length of every kernel                 |
| FIFO_DEPTH     | 16       | packets per endpoint FIFO                          |
| CK_FIFO_DEPTH  | 2        | packets per kernel-to-kernel and network-in FIFO   |
| DATA_W         | 32       | element width                                      |
| C              | 64       | reduce tile (credits), a power of two              |
| REDUCE_DTYPE   | DT_FLOAT | reduce data type                                   |

Coarse synthesis of the top at these defaults gives about 4,300 cells,
6,200 flip-flop bits and 94,000 bits of memory. Most of the memory is the
packet FIFOs. The eight routing tables take 12,288 bits.

**Timing.**

* Each kernel forwards at most one packet per cycle.
* A packet crossing a rank in transit (network in → CKR → CKS → network
  out, or via a second CKS) passes 2 to 3 FIFOs of one cycle each, plus
  polling delays.
* At R = 1, injection from one endpoint takes one packet per N cycles, where
  N is the number of CKS inputs. N is 6 in this top: two endpoints, the
  paired CKR and three other CKS. With one endpoint per pair (`NUM_APP = 1`
  on the kernels) N is 5.

## Where this departs from the published SMI

* **Kernel style.** The published kernels are HLS code. Here they are
  hand-written RTL with valid/ready handshakes, so cycle counts are this
  design's own. The one published figure it reproduces exactly is the 5-cycle
  injection period at R = 1 with one endpoint per pair.
* **Two endpoints per pair.** The evaluated resource configuration has one
  endpoint per kernel pair. Here every pair carries a point-to-point channel
  and a collective. This costs one extra poll slot per kernel: the injection
  period at R = 1 is 6 cycles instead of 5.
* **Fixed endpoint set.** There are four point-to-point channels (ports 0–3)
  and one instance of each collective. A code generator would size this per
  application.
* **Point-to-point is eager only.** The credit-based point-to-point
  protocol, for messages longer than the buffers, is not built. The
  published implementation also evaluated only the eager one.
* **Choices not given in the published description.**
  * how the broadcast root orders its copies;
  * that the first reduce credit is sent at open;
  * the reduce tile size C;
  * the header bit order and op encoding;
  * the routing-table entry format and upload port;
  * moving on from a blocked input when polling.
* **Reduce packets.** Reduce sends one element per packet, as the
  published implementation does. This costs bandwidth compared with packed
  point-to-point data.

## Verification

Each block has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=… failures=…` line and has a watchdog.

| testbench          | what it checks                                                                                  |
|--------------------|-------------------------------------------------------------------------------------------------|
| tb_smi_fifo        | ordering under random traffic, full/empty, one-cycle latency                                    |
| tb_smi_push        | packing, header fields, partial last packet, one element per cycle                              |
| tb_smi_pop         | unpacking, one element per cycle, back-to-back packets                                          |
| tb_smi_cks         | routing by rank; 5-cycle injection period at R = 1; run-length timing at R = 8                  |
| tb_smi_ckr         | routing by rank and port, transit, polling run lengths                                          |
| tb_smi_bcast       | 4 ranks over an ideal network, one ready notification per rank                                  |
| tb_smi_reduce      | 4 ranks, C = 8; credits per tile, no rank over its credit, ADD/MAX/MIN                          |
| tb_smi_scatter     | 4 ranks, varying roots                                                                          |
| tb_smi_gather      | 4 ranks, varying roots                                                                          |
| tb_smi_fp32_add    | 20,000 random FP32 additions against the simulator's double-precision arithmetic, special cases |
| tb_smi_rank        | 8 full-size ranks (see below)                                                                   |

`tb_smi_reduce` runs in FP32 by default and with `-GDT=0` in integer mode.
In FP32 its contributions are quarter-integers, so every order of additions
gives the same exact result.

`tb_smi_rank` connects eight unmodified `smi_rank` instances. Port 1 of
rank *i* goes to port 0 of rank *i*+1, and port 3 of rank *i* to port 2 of
rank *i*+2 mod 8. The testbench computes shortest-path routes and writes
them into all 64 routing tables. It then runs two phases:

1. Routes over the bus links only, with up to 7 hops.
2. The tables are reprogrammed at run time to use all links.

Each phase runs:

* point-to-point messages, including one within a rank and messages whose
  endpoint sits behind another kernel;
* in phase 2 only, a halo exchange: every rank sends to each of its cabled
  neighbours at once, over all four point-to-point channels (30 messages);
* a broadcast;
* FP32 reductions over several tiles;
* a scatter and a gather.

All received data is compared with reference values. The testbench also
counts, and requires at least once, each of these events: transit
forwarding, CKS→CKS and CKR→CKR hand-over, local delivery, backpressure
stalls at an endpoint, a poll switch at the R limit, rendezvous and credit
packets, the reconfiguration and every collective.

Simulating with Verilator:

```
verilator --binary --timing --assert rtl/smi_pkg.sv rtl/smi_fp32_pkg.sv \
    $(ls rtl/*.sv | grep -v _pkg) tb/tb_smi_rank.sv --top-module tb_smi_rank
./obj_dir/Vtb_smi_rank
```

Replace the testbench name to run another one. The eight-rank test builds
and runs in about a minute.
