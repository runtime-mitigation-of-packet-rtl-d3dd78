# SeFaR: a mesh NoC router that survives packet-drop Trojans

Fault-tolerant routing lets a network-on-chip keep working when links
break. It also opens a hole. Suppose a hardware Trojan sits behind the
routing unit of one input port. It waits until one of the router's output
links has failed, then rewrites the output-port index of every packet on that
port so that the packet leaves through the broken link. The packet is gone.
Retransmission does not help, because the retry takes the same path. This is
the *packet-drop attack*.

SeFaR ("secure fault-tolerant router") adds three small units to an ordinary
input-queued, fault-tolerant mesh router:

* **Authentication unit (AU).** It sits at the crossbar and compares every
  output-port index that reaches the crossbar with the router's link status.
  A clean fault-tolerant router never picks a faulty output. So an index that
  names a faulty output proves that the routing logic of that input buffer
  has been tampered with. The AU then raises the port's warning flag `F`.
* **Control unit (CU), one per input port.** It is a modulo-5 counter whose
  value `Z` is a port index. Its reset value is the port's own index. While
  `F` is high it steps to the next buffer, and keeps stepping as long as the
  buffer it points at is busy.
* **Buffer shuffler (BS).** It is a 5×5 crossbar in front of the input
  buffers. Port *k*'s flits go into buffer `IB(Z_k)`. After a detection, the
  port's traffic is sent into another port's buffer, whose routing unit is
  clean.

The flagged buffer is then taken out of switch allocation. Its packets can
no longer reach the broken link.

This RTL provides the router, the 8×8 mesh it was evaluated in, and the
Trojan itself. The Trojan is included so the attack can be reproduced in
simulation; tie `ht_en` to zero for a clean chip.

## Port numbering and codes

Every port has a 3-bit index. The CU counts through these values and the AU
compares against them.

| index | port | router array position | link-status bit |
|-------|------|-----------------------|-----------------|
| 001   | North (I1/O1) | 0 | LN = bit 3 |
| 010   | East  (I2/O2) | 1 | LE = bit 2 |
| 011   | South (I3/O3) | 2 | LS = bit 1 |
| 100   | West  (I4/O4) | 3 | LW = bit 0 |
| 101   | Local (I5/O5) | 4 | – |
| 000   | no route      | – | – |

The source text assigns 011 to west and 100 to south. Its two truth tables
(Trojan decoder and AU) and its worked example (south neighbour reached
through O3) all use the opposite assignment, and this RTL follows those.
Code 101 for the local port is this design's choice. It follows from the
five-state counter that starts at 001.

Link-status vectors are always ordered `{LN, LE, LS, LW}`, and a 1 marks a
faulty link.

## Flit format

`sefar_pkg::flit_t` is 34 bits: `{head, tail, data[31:0]}`. A head flit
carries its destination in `data[2:0]` (x) and `data[5:3]` (y). All other
payload bits are free. The mesh numbers router `r = y*8 + x`, and y grows
towards the south. The paper gives no flit format; this one is an
assumption.

## The router (`sefar_router`)

```
 I1..I5 ─► BS ─► IB1..IB5 (2 VCs × 4 flits each) ──────────► XB ─► O1..O5
           ▲        │ front head flits                       ▲
           │        ▼                                        │
           │     RU per VC ─► route reg ─► [Trojan H] ─► AU ─┴─► SA
           │                                             │ F
           └──────────────── CU1..CU5 (Z) ◄──────────────┘
                     LSA (link status register) feeds RU, H and AU
```

Data path. A flit on input port *k* passes the buffer shuffler into buffer
`IB(Z_k)`. The buffer's VC allocator gives each new packet a free virtual
channel. When the head flit reaches the front of its VC, the VC's routing
unit computes an output index, and the index is latched for the whole
packet. The switch allocator then moves one flit per cycle per buffer
through the crossbar.

Control path, where the attack happens. The latched index passes the Trojan
site `H` before it reaches the AU and the switch allocator. With the Trojan
dormant (`ht_en = 0`), or with no faulty link, the index passes unchanged.
When triggered, `H` replaces it with the index of the faulty output.

Timing. A head flit written into an empty buffer in cycle *t* has its route
latched at the end of *t+1*. It can be switched in cycle *t+2*. Body flits
follow at one flit per cycle. A mesh hop adds one more cycle in the link
stage. The routers in the source are five-stage pipelines with credit-based
flow control; here the pipeline is shorter and the links use valid/ready
(see *Departures*).

### Detection and mitigation, cycle by cycle

The source's example has R3's east link (O2) broken and a Trojan behind the
north input (I1). Packets arrive on I1 and should leave south (O3). This is
the sequence in the RTL:

1. The packet's head is in IB1, and its route 011 (south) has been latched.
   The Trojan sees `LE = 1` and turns the index into 010 (east).
2. In the same cycle the AU of IB1 finds that 010 names a faulty link and
   sets `w` for that VC. The switch allocator ignores flagged VCs, so the
   flit never goes east.
3. One clock later the sticky flag `F1` is set. Buffer IB1 is now *blocked*.
   The switch allocator ignores it for good. If a packet was half-way into
   IB1, the rest of its flits are accepted and discarded, so input I1 does
   not hang on a packet it cannot finish. No new head flit is let into IB1:
   a head aimed at it waits one clock until the CU has moved on. Packets
   already inside IB1 are lost. There can be at most one per VC, so at most
   two.
4. CU1 sees `F1 = 1` and its busy flag `B1` (which includes `F1`) is high,
   so it steps `Z1` from 001 to 010. `B2` is low, so it stays at 010.
5. The next head flit on I1 goes to IB2. IB2's routing unit is clean, so the
   packet leaves through O3.

#### When is a buffer busy?

For the CU of port *i*, buffer *j* is busy if either of these holds:

* its own flag `F_j` is set;
* another port *k* (k ≠ i, k ≠ j) has already been moved into it (`Z_k = j`).

So each buffer serves its own port plus at most one moved port. The source
only says that a busy buffer is one "occupied by another CU". The exact rule
above is this design's.

#### Two ports writing into one buffer

A moved port and the buffer's own port share one buffer. The shuffler locks
a buffer to one input port from that port's head flit to its tail flit.
Packets are therefore never split or interleaved. A port's `Z` only takes
effect at its next head flit. When both ports offer a head flit in the same
cycle, the buffer's own port wins and the other one sees `in_ready = 0`.
The source assumes no such contention; the arbitration is this design's.

#### Other details

#### Several Trojans in one router

Suppose Trojans sit at four of the five inputs. Then four buffers end up
flagged, and for some ports every buffer is busy. The CU of such a port
keeps stepping, since its enable `F & B[Z]` stays high. Its head flits get
in whenever `Z` passes a clean buffer that is free at that moment. The
ports share the clean buffer and get slow service, but their traffic is not
dropped. Packets lost are only those that were already inside a buffer
when it was flagged.

The warning flag is sticky: only reset clears it. The Trojan stays in the
silicon, so the flagged buffer is never trusted again.

`warn`, `cu_state` and `ht_active` bring `F`, `Z` and the Trojan's mux
select out as observation outputs.

### Blocks

| file | block | what it does |
|------|-------|--------------|
| `sefar_pkg.sv` | – | port codes, flit type, helper functions |
| `lsa.sv` | link status analyser | sticky register of the four link faults (`SS` inputs) |
| `ft_routing_unit.sv` | RU | combinational fault-tolerant route, one per VC |
| `hardware_trojan.sv` | H | the attack: decoder + three 2:1 muxes, exactly the source's truth table |
| `authentication_unit.sv` | AU | per-VC anomaly `w`, sticky port flag `F` |
| `control_unit.sv` | CU | mod-5 counter, seed = port index, enable `F & B[Z]` |
| `buffer_shuffler.sv` | BS | 5×5 port-to-buffer crossbar with packet locks |
| `input_buffer.sv` | IB | 2 VCs × 4 flits, route registers, sink mode |
| `vc_allocator.sv` | VA | lowest free VC for each arriving packet |
| `switch_allocator.sv` | SA | separable round-robin allocator, wormhole output locks, AU masking |
| `rr_arbiter.sv` | – | round-robin arbiter used by the SA |
| `crossbar.sv` | XB | 5×5 output crossbar |
| `sefar_router.sv` | SeFaR | the router |
| `link_stage.sv` | link | link-traversal register; a faulty link loses every flit |
| `sefar_mesh.sv` | NoC | 8×8 mesh of routers and links (top level) |

### The routing unit

The source relies on a look-ahead fault-tolerant algorithm from the
literature, which looks at link status up to two hops away. That algorithm
is not specified, so `ft_routing_unit` implements a small rule with the one
property SeFaR depends on: it never chooses an output whose link is marked
faulty while a healthy one exists. The rule, in order:

1. At the destination, route to the local port.
2. Otherwise take the productive X direction if it is healthy.
3. Otherwise take the productive Y direction if it is healthy.
4. Otherwise take the first healthy existing direction in the order N, E,
   S, W.
5. If no direction is healthy, return 000.

The rule only sees the router's own four links. A packet can therefore
bounce between two routers when a productive Y link is broken and X is
already aligned. It is also not deadlock-free. With a single broken link it works (see
`tb_sefar_mesh`). With 5 % or 10 % of the links broken, part of the traffic
jams (see `tb_sefar_mesh_synthetic`). For network-level studies at those
fault rates, replace this unit with a proper look-ahead algorithm. The
ports stay the same.

## The mesh (`sefar_mesh`)

The mesh has 64 routers and 224 directed links, each a `link_stage`.
`link_fault[r]` (`{N,E,S,W}`) marks router *r*'s outgoing links as broken.
A broken link swallows every flit offered to it and pulses `link_drop`. The
same bits feed router *r*'s link-status input, so the router knows about its
own broken links. `ht_en[r][p]` arms the Trojan behind buffer *p* of router
*r*. The local ports (index 4) are the tile interface. Cores, caches and
network interfaces are not part of this RTL.

The link stage is a two-entry FIFO. Its `in_ready` and `out_valid` are both
registered. This is needed because a router's `out_valid` may depend on the
same cycle's `out_ready`: the switch allocator only grants ready outputs.
Without the register, joining two routers would close a combinational loop.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `NUM_VC` (router, mesh, IB, AU, SA) | 2 | VCs per input buffer; the source also evaluates 4 and 8 |
| `VC_DEPTH` | 4 | flits per VC |
| `MESH_DIM` | 8 | mesh is `MESH_DIM × MESH_DIM` (up to 8 with the 3-bit coordinates) |
| `sefar_pkg::FLIT_W` | 32 | payload width; the source also evaluates 64 and 128 |

`NUM_PORTS = 5` is fixed: the CU is a modulo-5 counter over the five port
codes.

## Verification

Each block has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
prints `TB_RESULT checks=N failures=M` and ends with a watchdog. In
summary:

* **Decoder, AU, CU.** The Trojan decoder and the AU are checked against the
  printed truth tables and exhaustively. The CU test replays the source's
  timing example (001 → 010, hold while B2 is low, → 011 once B2 rises) and
  the 101 → 001 wrap.
* **Routing unit.** Checked exhaustively over all 64×64 position and
  destination pairs and all 16 fault patterns, against properties rather
  than a copy of the rule.
* **Router** (`tb_sefar_router`, default sizes). Random multi-flit traffic
  runs from all five ports, with back-pressure, in three phases: fault-free;
  east link broken; east link broken with the north-port Trojan armed. Each
  output reassembles the packets and checks order, length and the choice of
  output. In phase 3 the test requires all of the following:
  * `F` is set on the north port only;
  * CU1 ends at 010;
  * one or two packets are lost;
  * every other packet is delivered.

  A fourth phase arms the Trojans at I1..I4 together. Every packet must
  still arrive, except those whose head entered an armed buffer before it
  was flagged.

  It also counts each mechanism (detour, Trojan trigger, AU warning, CU
  step, redirected flit, sink discard, shared-buffer stall, stalls,
  back-pressure, both VCs busy) and fails if any count is zero.
* **Mesh** (`tb_sefar_mesh`, 8×8, all defaults). The same three phases run
  network-wide, with router 27 (x = 3, y = 3) as the victim. The test
  checks:
  * every packet reaches its addressed tile, whole and in order;
  * no flit ever enters a faulty link;
  * packets detour around the broken link;
  * only router 27's north port is flagged;
  * at most two packets are lost.

* **Synthetic traffic** (`tb_sefar_mesh_synthetic`, 8×8, all defaults).
  It uses three patterns: uniform random, transpose and shuffle. Each runs
  under five conditions:
  * no faults;
  * 11 faulty links (5 % of 224) with the Trojans dormant;
  * the same 11 faults with the Trojans armed;
  * 22 faulty links (10 %), dormant;
  * the same 22 faults, armed.

  An armed condition puts a triggered Trojan at every router that has a
  faulty output. The test prints the delivered count and the average packet
  latency for each run. It checks that no flit ever enters a faulty link, that
  only armed Trojans are flagged, and that every armed Trojan whose tile sent
  traffic is flagged. Packets that arrive must be whole and at the right
  tile. Fault-free runs must deliver everything.

  **Known limitation.** With 5 % or 10 % of the links broken, the simple
  routing unit jams. Roughly 5 to 30 % of the packets never arrive, even
  with the Trojans dormant. This is a routing problem, not a security one,
  and the test reports it without failing. Latency numbers for faulty
  networks therefore say little until a proper look-ahead, deadlock-free
  routing unit is dropped in.

To run one with plain Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl --top-module tb_sefar_mesh \
          rtl/sefar_pkg.sv tb/tb_sefar_mesh.sv -o sim && obj_dir/sim
```

Building the 8×8 mesh takes about four minutes. `tb_sefar_mesh` then
simulates in seconds; the synthetic study takes one to two minutes.

## Departures from the source, in one place

* **Port codes.** South = 011 and west = 100, following the truth tables and
  the example rather than the one sentence that swaps them. The local port
  is 101.
* **Routing.** A simple one-hop fault-aware rule stands in for the
  unspecified look-ahead algorithm (see above).
* **Flow control.** Valid/ready replaces credits. The head latency is 2
  cycles plus 1 per link, not a five-stage pipeline. VC allocation happens
  in the receiving buffer when a packet arrives: the lowest free VC, one
  packet per VC. There is no upstream VC allocation with the `VCn`/`VCu`
  signals.
* **CU clocking.** The CU's gated clock (`Clk AND B[Z]`) is a synchronous
  enable.
* **AU.** The AU is an index-equals-faulty-port comparison. It equals the
  printed truth table whenever at most one link is faulty. Its flag is a
  sticky register, and the per-VC anomaly also masks the switch allocator in
  the cycle before the flag is set.
* **Flagged buffers.** A flagged buffer finishes swallowing a packet that
  was entering it and then admits nothing. Its stored packets are
  abandoned. The source only says that the AU blocks the bad indices.
* **Buffer sharing.** The busy-flag rule, the packet locks and the shared
  buffer arbitration are this design's (see above).
* **Shuffler circuit.** The shuffler is built from multiplexers; the source
  suggests pass transistors.
* **Not included.** The "comprehensive secure router", which adds
  mitigations from other works, is not included.
