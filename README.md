# 3D-FETO: a soft- and hard-fault tolerant 3D network-on-chip

A many-core chip stacked in layers needs an on-chip network that keeps
delivering packets when parts of it fail. Two kinds of failure matter here:

* **Soft errors.** These are single-event upsets that flip a bit for one cycle.
  They may hit a flit on a wire or the result of a control computation, such as
  the routing decision or the switch grant.
* **Hard faults.** These are permanent defects: a dead buffer slot, a broken
  crossbar link, or a broken link between routers. Inter-layer through-silicon
  vias are especially prone to them.

This RTL implements a 3D mesh of seven-port routers (called SHER-3DR, for
soft-hard error resilient 3D router) that handles both. Soft errors are handled
at the point where they happen, so nothing needs an end-to-end check:

* **Data on links** is protected by an error-correcting code (ECC). A flit the
  code cannot correct is retransmitted on request (ARQ, automatic repeat
  request).
* **Control results** are computed twice in consecutive cycles and compared.
  When they differ, a third computation settles the result by majority vote.
  This is called pipeline computation redundancy (PCR).

Hard faults are found by watching the ARQ traffic, and then each is worked
around where it is:

| Where the fault is | How it is worked around |
|---|---|
| Buffer slot | The slot is retired (random access buffer, RAB) |
| Crossbar link | A spare bypass link replaces it (BLoD, bypass link on demand) |
| Link between routers | The link is declared dead and the look-ahead routing steers around it (LAFT) |

Everything is synthesizable SystemVerilog (IEEE 1800-2017) in `rtl/`.
Self-checking testbenches are in `tb/`.

## Flit format and link

A flit is 44 bits: 32 bits of protected data and 12 check bits. The data is
covered as two 16-bit halves, each by a SECDED(22,16) code (single error
correct, double error detect).

| bits    | field                                                |
|---------|------------------------------------------------------|
| [43:38] | check bits of the upper half (bits 31:16)            |
| [37:32] | check bits of the lower half (bits 15:0)             |
| [31:30] | flit type: 00 single, 01 head, 10 body, 11 tail      |
| [29:27] | next-output-port (where to go at the *next* router)  |
| [26:18] | destination x, y, z (3 bits each)                    |
| [17:0]  | payload                                              |

The sizes follow the paper's evaluation setup: 44-bit flits, a 14-bit header,
an 18-bit payload and 2 × SECDED(22,16). The field positions are this design's
choice.

A link (`link_t`) is `{valid, flit}`. Three signals run back to the sender:

* **stop:** the Stop-Go flow-control stop.
* **arq:** the retransmission request.
* **status:** a 14-bit word, `nstat_t`, made of a dead-link bit and a congestion
  (stop) bit for each of the seven outputs.

The status of every neighbour is what the look-ahead routing reads.

Ports are numbered L=0 (local), N=1 (+y), E=2 (+x), S=3 (−y), W=4 (−x),
U=5 (+z) and D=6 (−z). `feto_pkg` holds the types and the shared functions:
the Hsiao encoder and decoder, the LAFT route function and the coordinate
helpers.

### The code

`hsiao_chk` builds the check bits from a column matrix. Data column *j* is the
*j*-th 6-bit value of weight 3, counting up from 0: 0b000111, 0b001011, and so
on. There are 20 such values, and the first 16 are used. Because every column
has odd weight, the syndrome tells the cases apart:

| Syndrome | Meaning | Action |
|---|---|---|
| Zero | No error | Use the flit |
| Weight 3, equal to a data column | One data bit flipped | Flip that bit back |
| Weight 1 | One check bit flipped | Regenerate the check bits |
| Any other | Two or more bits flipped | Uncorrectable: request ARQ |

`feto_ecc` decodes both halves combinationally. It outputs three things:

* `write`: the flit is good or was corrected.
* `arq`: the flit is uncorrectable.
* `fixed`: a bit was corrected.

The flit it passes on has correct check bits.

## Router pipeline and PCR

```
 link ─► ECC ─► RAB buffer ─► NPC (LAFT, look-ahead) ─┐
              │                                      ├─► switch allocator ─► crossbar + ARQ buffers ─► link
 arq ◄────────┘                  stop ◄── RAB        │         ▲                 ▲  bypass links
                                                     │   PCR phase FSM           │
                                     fault manager (DDRM) ◄── arq from downstream
```

### NPC: next-port computation

Each input port computes the port its head flit will take at the next router.
This is possible because the output at this router is already in the flit: it
was computed by the previous router.

Because of that, routing does not sit in front of allocation, and the two run
side by side in the same cycles. `feto_laft_npc` applies the routing function
at the neighbour reached through the chosen output, using that neighbour's
status word.

### How LAFT routing chooses a port

`laft_route` chooses among candidate directions as follows.

1. **Minimal candidates.** These are the directions that bring the flit closer
   to its destination and that:
   * are not dead,
   * are not the way back (no U-turn),
   * do not leave the mesh.
2. **Scoring.** Each minimal candidate scores `2·diversity + !congested`.
   * Diversity is the number of dimensions still left to travel after the hop.
     Keeping more ways open avoids dead ends later.
   * A direction is congested when that output is currently stopped.
   * The first best candidate in port order N, E, S, W, U, D wins.
3. **Non-minimal fallback.** If no minimal candidate exists, any healthy
   direction that is not a U-turn is taken, scored only by congestion.
4. **Last resort.** If even that fails, the first minimal direction is taken.

A flit for the local port needs no computation. The weights and the tie-break
are this design's own. The paper names only diversity and congestion as the
criteria.

### The PCR phase sequence

The switch allocator (`feto_switch_alloc`) owns the PCR phase, which cycles
through these states:

```
PH_FIRST ─► PH_REDUN ─┬─ no mismatch ─► PH_FIRST        (flits move at the end of PH_REDUN)
                      └─ mismatch ────► PH_RECOV ─► PH_FIRST   (flits move at the end of PH_RECOV)
```

* **PH_FIRST.** Every input port samples the inputs of its computation: head
  flit, requested port and neighbour status. The allocator samples its requests
  and stop signals.
* **PH_REDUN.** The same computations run again on the sampled inputs. A
  `feto_pcr` instance compares the two results:
  * one instance per input port, on the next-port result;
  * one instance in the allocator, on the 7-bit grant vector.
* **Mismatch.** If any instance sees a mismatch, the whole router enters
  PH_RECOV. The third computation is voted bitwise against the other two, and
  the vote is used.

So in the absence of errors a flit spends two cycles in allocation, and three
when a soft error was caught. The `seu_npc` and `seu_sa` inputs flip bit 0 of
a next-port result or of the grant vector in the cycle they are asserted. They
exist for testing.

### Allocation rules

* Allocation is round-robin per output.
* Switching is wormhole-like. An output that has sent a head stays locked to
  that input until the tail.
* An output is refused while any of these holds:
  * its downstream stop is raised;
  * it is holding a flit for retransmission;
  * it has been declared dead.
* Requests refused in PH_FIRST are counted as stalls.
* Body flits follow the output their head took.
* If that output dies in mid-packet, the lock is dropped. The input then
  recomputes a route at this router from the head's destination, using its own
  router's status (re-routing).

### Merging the next-port field

The input port writes the computed next-port into the leaving flit. It does not
re-encode the flit. It updates the check bits of the upper half incrementally:

`chk1' = chk1 ^ H(old bits ^ new bits)`

So a bit corrupted while the flit sat in a faulty buffer slot is still visible
to the ECC at the next router. That is what lets the fault manager locate a
faulty slot.

## ARQ and the fault manager (DDRM)

`feto_crossbar` keeps one ARQ buffer per output. A flit that passes the
crossbar is registered there and driven on the link. The receiver's ECC
answers in the same cycle:

* **arq low:** the buffer is freed.
* **arq high:** the buffer holds the flit, and the output sends it again in the
  next cycle.

The buffer sits in front of the crossbar link, so a retransmission crosses the
same possibly faulty path again. This is what makes diagnosis possible.

`feto_fault_manager` runs one DDRM (detection, diagnosis and recovery
mechanism) state machine per output. A transient fault lasts one cycle, so the
second try of a flit normally succeeds.

### Detection

A second request for the same flit means a permanent fault. That flit is
dropped: the design does not try to rescue it. Diagnosis then looks at the
**next** flit sent through this output:

| State        | next flit ...                                     | action |
|--------------|---------------------------------------------------|--------|
| `S_CHECK`    | fails again from the **same** input slot          | flag that slot; RAB retires it; back to `S_NORMAL` |
| `S_CHECK`    | passes, coming from **another** slot              | the error stayed with the first slot: flag it; back to `S_NORMAL` |
| `S_CHECK`    | fails from another slot (crossbar or channel)     | enable a free bypass link for this output → `S_BLOD`; with none free → dead (`S_FAULTY`) |
| `S_CHECK`    | passes from the same slot                         | it was transient after all; back to `S_NORMAL` |
| `S_BLOD`     | passes through the bypass                         | fault was in the crossbar; keep the bypass → `S_BYPASSED` |
| `S_BLOD`     | fails through the bypass too                      | fault is in the channel; free the bypass, mark the output dead → `S_FAULTY` |

### Effects of a dead output

* The output's dead bit goes into the router's status word. Upstream routers
  stop choosing this direction, and so do this router's own input ports.
* Any flit that still names the dead output is re-routed at this router.

### Bypass links

There are two bypass links, as drawn in the paper's figure of the mechanism.
Each can take over any one output. The state names and the "watch the next
flit" rule are this design's reading of the paper's diagnosis algorithm.

## Random access buffer

`feto_rab_buffer` is a four-slot input buffer. Its rules:

* Each slot has a used bit, a faulty bit and an arrival tag.
* A write goes to the lowest free slot that is not faulty.
* The head is the slot whose tag matches the read counter. This keeps flits in
  arrival order while the physical slots are used out of order.
* A flagged slot is never written again.
* `stop` is raised while fewer than two healthy slots are free. One extra slot
  covers a flit already on the wire when the stop arrives.
* Writing into a full buffer is a protocol error. It is reported on `overflow`
  and checked by an assertion.

## Network interface

`feto_ni` is the bridge between a processing element (PE) and the router's
local port. On the send side it:

1. takes one flit per `tx_valid`/`tx_ready` handshake;
2. builds the header and computes the first hop with LAFT at its own router;
3. locks that hop for the rest of the packet;
4. encodes the check bits;
5. keeps the flit until the router's ECC accepts it, resending it on request.

On the receive side it checks and corrects incoming flits with the same ECC
decoder. It never raises stop.

The NI is only named in the paper. Everything in it is this design's own.

## Top level and fault injection

`feto_noc` has parameters X, Y and Z, with a default of 4×4×4. That is the size
the paper evaluates its synthetic traffic on.

### Topology

* The top instantiates one `feto_router` and one `feto_ni` per node.
* Node n sits at x + X·(y + Y·z).
* Ports at the mesh edge see a raised stop and a status of "all links dead".
  As a result, routing never leaves the mesh.

### Fault-injection inputs

All fault-injection inputs are XOR masks:

| Input | Where it acts |
|---|---|
| `slot_fault[n][port][slot]` | Applied on write into a buffer slot |
| `xbar_fault[n][port]` | Crossbar output link |
| `byp_fault[n][b]` | Bypass link |
| `chan_fault[n][port]` | Channel leaving node n at that port |
| `seu_npc`, `seu_sa` | Upsets in the control computations |

A stuck or broken wire is modelled by holding a mask steady. A transient fault
is modelled by pulsing the mask for one cycle.

### Observation outputs

`ev[n]` (`rev_t`) pulses once for each event:

* ECC corrections;
* ARQ requests;
* caught NPC and allocator upsets;
* retransmissions;
* permanent faults found;
* flagged slots;
* bypass links enabled;
* links declared dead;
* stalls;
* re-routes.

## Verification

Every block has a self-checking testbench that prints
`TB_RESULT checks=N failures=M` and has a watchdog. Each one is built with
plain Verilator, for example:

```
verilator --binary --timing -Irtl -y rtl +libext+.sv rtl/feto_pkg.sv tb/tb_feto_router.sv --top-module tb_feto_router
./obj_dir/Vtb_feto_router
```

| testbench | what it checks |
|---|---|
| `tb_feto_ecc` | 2000 random flits, each with 0, 1 or 2 random bit errors: correction, ARQ, clean re-encoding |
| `tb_feto_pcr` | random result sequences; compare and majority vote against a reference |
| `tb_feto_rab_buffer` | random writes, pops and slot flags against a queue model; stop threshold; order |
| `tb_feto_laft_npc` | hand-worked routing cases: local, minimal, diversity, congestion, faults, non-minimal |
| `tb_feto_input_port` | ECC and ARQ on input, PCR sampling, next-port merge, wormhole lock, re-route |
| `tb_feto_switch_alloc` | phase sequence, round-robin, stall, output lock, grant upset and vote |
| `tb_feto_crossbar` | switching, ARQ hold and resend, drop, bypass take-over, fault masks |
| `tb_feto_fault_manager` | the three diagnoses (slot, crossbar, channel) and the no-bypass case |
| `tb_feto_router` | a single router end to end, including upsets, stop and a permanent fault |
| `tb_feto_ni` | handshake, first-hop lock, ECC encode, ARQ resend, receive side |
| `tb_feto_noc` | the whole network, see below |
| `tb_feto_traffic` | transpose, uniform and hotspot-10% traffic with 10-flit packets, with and without soft errors; delivery, per-flit latency bound, average latency |

### The network testbench

`tb_feto_noc` runs the network at 2×2×2. Every packet carries its source and a
sequence number in its payload, and a scoreboard checks three things:

* every flit arrives at the right node;
* every flit arrives exactly once;
* every flit arrives uncorrupted.

The test runs these phases in order:

1. uniform and hotspot traffic (stalls);
2. upsets in next-port and switch computations;
3. a single-bit channel error (ECC correction);
4. a one-cycle double-bit error (ARQ);
5. a permanent crossbar fault (bypass);
6. a permanent channel fault (dead link and re-routing);
7. a faulty buffer slot (RAB).

Each mechanism's events are counted, and a mechanism that never happened
counts as a failure.

### Synthetic traffic

`tb_feto_traffic` offers the synthetic patterns on the 2×2×2 mesh, which is
also the size of the PIP application. Each pattern is run once fault-free and
once with random soft errors in the control computations.

The 3D patterns are defined as follows:

* **Transpose:** (x,y,z) sends to (y,x,z).
* **Uniform:** destinations are drawn at random.
* **Hotspot:** as uniform, but one packet in ten goes to node 0.

Every flit must arrive exactly once. No flit may take fewer than two cycles
per router it passes. The average latency from NI entry to delivery is
printed. With 8 packets per node it is 15 to 25 cycles. Soft errors add
about one cycle on average.

### Size limits

* **Simulation.** The 2×2×2 network is the largest size simulated. The default
  4×4×4 network elaborates and passes lint, but compiling its simulation model
  takes far longer than a test run is allowed. Larger meshes need only new
  X, Y and Z values.
* **Synthesis.** Synthesis at 4×4×4 was not finished in the time allowed, so
  area numbers are not available.

## Departures from the paper and open points

* **RAB deadlock recovery.** The paper draws a timer, a deadlock flag and a
  "best buffer" selector that let a blocked head be bypassed. It does not say
  when they fire or which flit they pick. This buffer always serves the oldest
  flit, so that part of RAB is not implemented.
* **Dropped flits.** A flit that meets a permanent fault is dropped. The paper
  is silent on its fate. Traffic that must survive permanent faults needs an
  end-to-end retry above this network.
* **Retired slots.** Flagged slots stay retired. The paper mentions checking
  flagged slots again, but gives no procedure.
* **The valid bit.** The valid bit beside each flit is not protected by the
  code.
* **This design's own choices.** The following are not given by the paper:
  * the LAFT scores and tie-break order;
  * the stop threshold;
  * round-robin arbitration;
  * the NI;
  * the edge tie-offs;
  * all field positions.
* **Not modelled.** The processing elements and the through-silicon vias have
  no logic of their own here. PEs are represented by the top's `tx_*`/`rx_*`
  ports, and vertical links are ordinary wires.
* **Workload sizes.** The paper's evaluation sizes 3×3×3, 3×2×2, 2×2×3 and
  2×2×2 fit in the default mesh. The 6×6×3 matrix workload and the 5×5×4
  arrival-rate study need the parameters raised.
