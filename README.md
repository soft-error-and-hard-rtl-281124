# 3D-FETO: a 3D network-on-chip router that survives soft errors and hard faults

A 3D mesh network-on-chip (NoC) is exposed to two kinds of trouble:

- **Soft errors.** Short, one-off upsets flip bits on a wire or in a flop. Examples are a particle strike or a supply glitch.
- **Hard faults.** Permanent defects stop a buffer slot, a crossbar channel or a whole router-to-router link from working. The through-silicon vias between dies are a common source.

This RTL builds a router, SHER-3DR, and a mesh of these routers, 3D-FETO. The design handles both kinds with cheap, local means:

| Problem | Remedy |
|---|---|
| Bit errors on data | An error-correcting code on every flit. A flit with a double error is retransmitted from a copy kept at the sender (ARQ, automatic repeat request). |
| Upsets in the routing and allocation logic | Each decision is computed twice. If the two results differ, it is computed a third time and the three results are voted. |
| A fault that keeps coming back | The sender's fault manager works out where the fault sits and reconfigures around it. A bad buffer slot is skipped. A bad crossbar channel is replaced by a spare bypass channel. A bad link is declared dead and the routing algorithm steers around it. |

## The flit

Every flit is 44 bits, and every flit carries its own header. Routers therefore switch flits one at a time and keep no per-packet state.

| Bits | Field | Contents |
|---|---|---|
| 43:32 | parity (12) | two SEC-DED checks, 6 bits each, one per 16-bit half of bits 31:0 |
| 31:30 | type (2) | head / body / tail / single (carried, not interpreted) |
| 29:21 | dest z, y, x (3 each) | destination coordinates |
| 20:18 | next-port (3) | output port the flit must take at the router it is arriving at |
| 17:0 | payload (18) | data |

Port numbers: 0 local, 1 north (+y), 2 east (+x), 3 south (-y), 4 west (-x), 5 up (+z), 6 down (-z).

The code works as follows:

- Each 16-bit half is protected by a Hamming code with 5 check bits plus an overall parity bit. This corrects any single-bit error and detects any double-bit error in that half.
- The code is linear. So when a router rewrites the next-port field, it does not re-encode the whole flit. It XORs the parity with the code of the changed bits only.
- As a result, an error picked up in the input buffer is never hidden by recomputing the parity over already-corrupted data.

The field sizes (44 / 14 / 18 / 12) are those of the original design. The split into two SEC-DED halves and the order of the header fields are this implementation's choices.

## Router pipeline and redundant computation

```
 link ─► ECC check/correct ─► RAB (4 slots) ─► LAFT next-port ┐
                                                               ├─► crossbar/BLoD ─► ARQ register ─► link
                              switch allocator (round robin) ──┘
          cycle 1 (BW)          cycle 2: compute (C1)
                                cycle 3: recompute (C2) + compare ─► commit, crossbar traversal
                                cycle 4: third compute (C3) + vote (only after a mismatch)
```

**Buffer write (cycle 1).** The incoming flit is checked by the ECC decoder:

- A single error is corrected and the flit is stored.
- An uncorrectable flit is not stored. `arq` is raised back to the sender in the same cycle, and the sender repeats the flit.

**Compute (C1).** Two computations run in parallel on the head flit of every input:

- The next-port computation (NPC, the LAFT routing).
- The switch allocation (SA).

They can run in parallel because routing is look-ahead. The port the flit takes *here* is already in its header. NPC works out the port it will need at the *next* router, and SA only needs the port already in hand.

**Recompute (C2).** The same computations run again on the same inputs. Each stage has a small `ser_manager`, which does three things:

- In C1 it keeps a copy of the first result, and the stage keeps a snapshot of the inputs it read.
- In C2 it compares the second result with the first.
- If every stage in the router agrees, the result is committed. The flit crosses the crossbar into the output register.

**Third compute (C3).** If any stage disagrees, the whole router spends one more cycle:

- Every stage computes a third time from its snapshot.
- A bitwise majority vote of the three results is committed.

All stages step through C1/C2/C3 together, and an assertion in the router checks this. A router therefore commits one allocation round every 2 cycles, or 3 after an upset.

**Latency.** From the buffer write to the flit appearing on the output link takes 3 cycles, or 4 when the allocation round has to wait for the next C1.

**Upset model.** The upsets themselves are modelled by the `seu_i` inputs. They flip a bit of the NPC result of one input port, or of the SA grant, in whichever phase they arrive.

## Look-ahead fault-tolerant routing (LAFT)

When a flit sits at router *n*, its next-port field names the output *p* it leaves through. LAFT chooses the output at the next router *m* = step(*n*, *p*). The choice is made with knowledge of *m*'s link faults and congestion: each router shows its neighbours a 14-bit status (7 link-fault bits and 7 congested bits). It chooses in this order:

1. **Minimal directions, faulty ones removed.** These are the directions at *m* that bring the flit closer to its destination, at most one per axis, excluding those whose link at *m* is faulty.
2. **With several candidates, compare path diversity.** A candidate's path diversity is the number of minimal directions still open one hop further on. Take the largest diversity, using congestion to break a tie. If all candidates have the same diversity, take the uncongested one. Remaining ties go to the lowest port number.
3. **With no minimal candidate, go non-minimal.** Take any healthy direction that stays inside the mesh and does not lead straight back to *n*, an uncongested one first. Going back is used only when nothing else is left.

The result becomes the new next-port. The port the flit takes at *n* is the old next-port.

**Local re-route.** One case is added here. If this router's own output *p* has meanwhile been declared dead, the flit was routed before the news arrived. The router then runs the same selection for itself, picking a new output at *n*, and pulses `rerouted_o`.

The tile at the source chooses the first next-port with the same function (`laft_select` in the package).

No virtual channels are used, so the minimal adaptive routing is not proven deadlock-free. The testbenches run at moderate load.

## Link protocol and ARQ

Each output has a one-flit **ARQ register** that drives the link and keeps the flit until it has been accepted. In every cycle the downstream answers combinationally with one of three responses:

| Downstream response | Meaning | Upstream action |
|---|---|---|
| `stop` | buffer full | keep the flit and try again |
| `arq` | uncorrectable error | keep the flit and resend |
| neither | accepted | the register is freed |

The local port uses the same protocol towards the tile in both directions.

## Diagnosing a permanent fault (fault manager)

A transient error costs one retransmission. The fault manager sits on the sender side, where both the ARQ and the failed flit's origin (input port and slot) are known. It keeps one ARQ counter per output, cleared by every successful transfer.

When a flit fails twice in a row on the same output, the fault is taken as permanent. That flit is dropped, because nothing says which copy is good, and the manager then narrows down where the fault is:

1. **Buffer check.** The manager remembers the buffer position the flit came from.
   - If the next permanent failure, on any output, comes from the same position, that slot is broken. It is marked in the Random Access Buffer (RAB), which skips it from then on.
   - If the next failure comes from a different position, the fault is further downstream, in the crossbar or the link.
2. **Crossbar check.** The manager asks the BLoD controller to carry this output over a spare bypass channel.
   - If the next flit on that output gets through, the crossbar channel was at fault, and the bypass stays in use.
   - If it fails again, the link is at fault.
3. **Link.** The output is declared dead in the router's status, which the neighbours read. They route around it from then on, and this router no longer sends anything there.
   - If no bypass channel is free at step 2, the link is declared dead at once.

Flits lost while a fault is being diagnosed are dropped. The end-to-end testbench counts them. In its runs, 2 to 3 flits are lost per permanent fault. The number of lost flits is not bounded by the design.

## Random Access Buffer and bypass links

**RAB.** Each input buffer has 4 slots and one fault flag per slot.

- A write goes to the first healthy free slot at or after the write pointer.
- A read takes the first valid slot at or after the read pointer, so order is kept.
- A buffer with *k* marked slots simply holds 4 − *k* flits.

**BLoD (bypass links on demand).** The crossbar is a 7×7 multiplexer crossbar. The spare channels are 2 extra 7:1 multiplexers (`NBYPASS`). Each can be attached to any output whose own channel is broken, assigned in port order.

## Fault-injection and observation ports

These inputs exist only to make the mechanisms testable. They model faults; real hardware would tie them to zero.

| Input | Effect |
|---|---|
| `link_err_i[n][p]` | On the link entering router *n* at port *p*: bit 0 flips one data bit (correctable); bit 1 flips two bits of one half (uncorrectable). |
| `buf_defect_i[n][p]` | Per slot: a flit stored in that slot is read out with two bits flipped. |
| `xbar_defect_i[n]` | Per output: the crossbar channel corrupts two bits. |
| `seu_i[n]` | Upsets in the NPC results (bits 6:0, one per input port) and in the SA grant (bit 7). |

Event outputs report what happened in every cycle:

- ECC corrections;
- retries (third computations);
- ARQ events;
- permanent faults;
- drops;
- local re-routes;
- bypasses in use;
- flagged slots;
- the status of each router.

## Modules

| File | Contents |
|---|---|
| `feto_pkg.sv` | flit and status types, ECC functions, LAFT selection |
| `ecc_encoder.sv`, `ecc_decoder.sv` | SEC-DED encode; check/correct/ARQ |
| `rab.sv` | 4-slot random access buffer with slot fault flags |
| `laft_routing.sv` | look-ahead next-port computation, local re-route |
| `ser_manager.sv` | compute / recompute / vote sequencer |
| `switch_allocator.sv` | round-robin allocation with its own redundancy monitor |
| `arq_buffer.sv` | output register, link protocol, retransmission |
| `crossbar_blod.sv` | crossbar with bypass channels |
| `fault_manager.sv` | permanent-fault diagnosis and reconfiguration |
| `input_port.sv` | ECC, RAB, LAFT and NPC redundancy of one input |
| `sher3dr_router.sv` | the router |
| `feto_noc.sv` | `MESH_X × MESH_Y × MESH_Z` mesh, default 4×4×4 |

Default parameters:

- Buffer depth 4, mesh 4×4×4, flit 44 bits. These are the evaluated configuration.
- `NBYPASS` = 2. This number is this design's own choice.

Coordinates are 3 bits per axis, so meshes up to 8×8×8 can be built, including the 6×6×3 configuration.

## Departures and gaps

- **ECC code, header layout, link handshake timing, round-robin arbitration, path-diversity measure, non-minimal choice, number of bypass channels, ARQ register depth.** These are not specified by the original description. The simplest workable choice was made for each.
- **Fault manager placement.** It sits at the sending router, so that the ARQ and the failed flit's buffer position are in the same place.
- **Flits that fail permanently are dropped.**
- **Redundancy phases run continuously.** An allocation round is 2 cycles, or 3 with a vote. The original pipeline chart does not say whether rounds overlap, and here they do not.
- **Local re-route.** Re-routing inside the router, for flits already aimed at a link that has just died, is an addition.
- **Out of scope.** Computation tiles, the network interface and the TSVs themselves are not part of this RTL. The tiles are modelled in the testbench.

## Simulation

Every module has a self-checking testbench in `tb/`. It prints `TB_RESULT checks=… failures=…` and stops itself with a watchdog if it hangs. To build and run one with Verilator:

```
verilator --binary --timing --assert -y rtl -y tb rtl/feto_pkg.sv tb/sher3dr_router_tb.sv \
          --top-module sher3dr_router_tb -o sim && ./obj_dir/sim
```

What the testbenches cover:

- **`sher3dr_router_tb`** tests one router, at the default buffer depth, in four phases:
  - the 3–4-cycle latency;
  - random traffic from all seven inputs with transient link errors and upsets;
  - a broken buffer slot;
  - a broken crossbar channel.

  It checks that every flit leaves through the right port with a valid code, exactly once.
- **`feto_noc_tb`** runs the whole network end to end on a **2×2×2 mesh**. This is the largest size simulated end to end: a 4×4×4 build takes Verilator well over a quarter of an hour to compile. It goes through four phases:
  - transient errors, upsets and back-pressure;
  - a broken slot;
  - a broken crossbar channel;
  - a broken link.

  Every mechanism must be seen at least once:
  - ECC correction;
  - link and tile ARQ;
  - redundant-computation vote;
  - permanent-fault detection;
  - slot marking;
  - bypass;
  - routing around a dead link;
  - back-pressure.

  The run also checks that every injected flit was either delivered at its destination or dropped during diagnosis.

No testbench runs the 4×4×4 default network.
