# Fault-tolerant NoC many-core: checkers, health map and fault-aware remapping

A many-core chip built from tiles (one router and one processing element
each) will see faults appear over its life: links break, router control
logic wears out, cores fail or slow down. This design closes the loop
from *detecting* such faults in hardware to *working around* them at the
system level:

1. Every router checks itself while it runs. Concurrent checkers watch
   its routing logic, its arbiters and its input buffers, and every flit
   carries an odd-parity bit that the receiver checks.
2. A central **System Health Monitoring Unit (SHMU)** collects the
   checker reports. It keeps a compact **System Health Map (SHM)** of what
   is broken: each PE, each of the eight 90-degree turns of each router,
   and each link, plus an aging byte per PE. It then decides whether the
   fault matters.
3. If the fault matters, the SHMU orders the **Mapper-Scheduler Unit
   (MSU)** to produce a new task-to-PE mapping. The MSU first looks in a
   small cache of precomputed mappings, the **Most Probable Mapping (MPM)
   memory**. These mappings were prepared earlier for faults that were
   predicted to come. It calls the (slow) mapping heuristic only on a
   miss. Either way, only the tasks whose PE changes are redeployed.
   Stored mappings carry no times. An as-soon-as-possible (ASAP)
   scheduler rebuilds the start time of every task from the task graph
   in one pass.
4. Inside the network, routers drop packets whose destination can no
   longer be reached. Each output port holds a few rectangle registers
   that describe the regions unreachable through it (the NoCDepend
   scheme). Without this, such packets would wander in the network and
   clog it.

The RTL in `rtl/` implements the hardware parts of this loop. The parts
that are software or outside IP are left as ports: the mapping heuristic,
the fault-prediction database, the iJTAG access network, the PEs, and the
offline computation of routing bits and rectangles.

## Block map

```
                 predict_*            pe_fault_*, aging_*
                     |                       |
                     v                       v
   report[]   +-------------+  port A  +-----------+  port B  +-------------+  map_req/map_rsp
 ------------>|    shmu     |<-------->|    shm    |--------->|     msu     |<----------------> mapping heuristic
 (checkers)   +-------------+          +-----------+          +-------------+
                 |    ^  |  Map-and-Store / Map-and-Deploy (cmd, done)  | |  \
                 |    |  +----------------------------------------------+ |   +--> deploy_* (to PEs)
                 |    |             read B   +---------+  write / read A  |
                 |    +------------------------| cmm_mem |<---------------+
                 |                             +---------+                |
                 |                             +---------+                |
                 |                             | mpm_mem |<---------------+
                 |                             +---------+                | map_out
                 |                          tg_* --> +----------------+   |
                 |                                   | asap_scheduler |<--+ --> sched_start, makespan
                 |                                   +----------------+
   +-------------+----------------------------------------------+
   | noc_mesh: COLS x ROWS routers                               |
   |   router = 5 x input_buffer + 5 x lbdr + nocdepend_filter   |
   |            + 5 x rr_arbiter + crossbar + parity check       |
   +-------------------------------------------------------------+
        ^ pe_in_*  | pe_out_*    ^ cfg_lbdr_*, cfg_nd_* (offline-computed)
```

`ft_manycore` is the top level. `ftnoc_pkg` holds the shared types:
flit, checker report, SHM layout, order codes, and the parity and CRC
functions.

## The network

**Packets.** A packet is one flit (`flit_t`): destination and source
coordinates (4 bits each), a 16-bit payload and an odd-parity bit. Links
use a valid/ready handshake. Tile `i` sits at `x = i mod COLS`,
`y = i / COLS`; y grows to the north, so in a 2x2 mesh tile 0 is
south-west and tile 3 north-east.

**Router pipeline.** A flit written into an input FIFO at clock edge `t`
can leave the router at edge `t+1` if its output is free. Each FIFO head
goes through three stages:

* `lbdr` computes the candidate outputs from 4 connectivity bits (is
  there a working link N/E/W/S?) and 8 routing bits (which turns are
  allowed). The logic is the usual Logic-Based Distributed Routing
  equations. With the XY bits loaded at reset (`Ren=Res=Rwn=Rws=1`), this
  is dimension-order routing.
* `nocdepend_filter` removes every output whose rectangles contain the
  destination. If nothing is left, the packet is dropped: it is popped
  and reported on `drop`.
* The lowest-numbered remaining output is requested. A round-robin
  `rr_arbiter` per output grants one input, and the FIFO pops when the
  downstream side takes the flit.

**Checkers.** Each checker produces one bit per port in the router's
`report`. All bits are registered.

| checker | watches | flags |
|---|---|---|
| parity | each flit accepted at an input | even number of ones |
| `input_buffer` | empty/full flags, pointers, counter, enables | any disagreement between them |
| `lbdr` | output mask of a valid head flit | output leading away from the destination, local/remote mix-up, output on a disconnected port, straight-ahead destination not taken |
| `rr_arbiter` | grant vector | grant without request, two grants, requests with no grant |

Each checker covers single stuck-at faults on the lines it watches. The
testbenches show this by forcing every such line to 0 and to 1 through
the `fi` fault-injection inputs. In normal use, tie `fi` and `link_sa1`
to zero.

## The System Health Map

The SHM has 17-bit words and `2*NT` addresses. A set bit means *Broken*,
so after reset everything reads healthy.

| address | bits 16..9 | bits 8..1 | bit 0 |
|---|---|---|---|
| `i` (tile) | aging byte of PE `i` | turn bits of router `i`: NE, NW, EN, ES, WN, WS, SE, SW (bit 1 = NE) | PE `i` broken |
| `NT+i` (links) | – | – | bits 3..0: outgoing link N, E, W, S of router `i` |

A turn named `XY` is a packet travelling `X` that leaves travelling `Y`.
For example, NE enters on the south port and leaves on the east port.
Port A (SHMU) reads and writes; port B (MSU) only reads. Both reads take
one cycle.

## How the SHMU reacts

This is the part with the most decisions in it. Every report bit from
every router, plus the PE reports, is one *source*. A source that fires
is latched as pending. Once it has been handled it is masked until reset,
so a permanent stuck-at fault that fires every cycle is processed once.
The SHMU serves one event at a time, in this priority order:
the start-up order, then faults, then aging updates, then predictions.

1. **Start-up.** After reset the SHMU issues one Map-and-Deploy. The CMM
   is empty at that point, so every task is placed.
2. **Fault.** The source is translated into an SHM address and bit mask:

   | report | marks Broken |
   |---|---|
   | parity error on input N/E/W/S of router r | the neighbour's link into r |
   | parity error on the local input | PE r |
   | buffer or routing checker, input d | the two turns a packet entering on d can take (all 8 for the local input) |
   | arbiter checker, output o | the two turns that end in o (all 8 for the local output) |
   | PE report (`pe_fault_*`) | PE r |

   The word is read (two cycles). If these bits are already Broken, the
   fault is *ignored* (`ev_ignored`). Otherwise they are set (`ev_fault`).
   A broken PE that runs no task of the current mapping is also ignored.
   The SHMU checks this by scanning the CMM, one task per cycle. Every
   other new fault issues **Map-and-Deploy** (`ev_deploy`), and the SHMU
   waits for the MSU's `done`.
3. **Aging.** The PE's aging byte is overwritten. No order is issued.
4. **Prediction.** A predicted fault is given as an SHM address and mask
   (`predict_*`). The SHMU writes it into the SHM and issues
   **Map-and-Store** (`ev_store`). After `done` it writes the original
   word back, so the SHM again shows the real state, while the MPM now
   holds a mapping ready for that fault.

There is no fault classification (transient, intermittent or permanent)
and no severity metric. Every report is treated as permanent.

## How the MSU answers

Both orders start by hashing the whole SHM into a 16-bit **fault tag**:
CRC-16/CCITT (polynomial 0x1021, initial value 0xFFFF, MSB first). The
MSU reads one word per cycle through port B. In the same pass it collects
the PE-broken bits, and these go to the mapping heuristic with each
request (`map_req_pe_broken`, `map_req_tag`).

* **Map-and-Store:** request a mapping, then write `{tag, mapping}` into
  the next MPM entry. Entries are replaced round-robin.
* **Map-and-Deploy:** search the MPM entries in order for the tag.
  - On a *hit*, the stored mapping is used and the heuristic is not asked.
  - On a *miss*, the heuristic is asked.

  Then comes *partial mapping extraction*. Each task's new PE is compared
  with the CMM. Only the tasks that differ are sent out on `deploy_*`
  (one per cycle) and written into the CMM.

A mapping is the list of PE ids, one per task (`NTASKS` entries of
`log2(NT)` bits). Latency in cycles, from the cycle after the order is
accepted to `done`:

| path | cycles |
|---|---|
| hash | `2*NT + 1` |
| MPM search, hit in entry k | `k + 2` |
| MPM search, miss | `ENTRIES + 1` |
| mapping heuristic | its own latency + 1 |
| extraction and deployment | `NTASKS + 1` |

With the defaults (`NT=4`, 8 tasks, 8 entries), a hit in entry 0 takes 20
cycles. A miss takes 28 cycles plus the heuristic's own latency. The benefit of
the MPM is that the heuristic's time disappears from the recovery
latency on a hit. The heuristic is by far the largest term, because a
local search runs a schedule at every step.

## Rebuilding the schedule

Only the mapping is stored, so the start times must be rebuilt after
every Map-and-Deploy. `asap_scheduler` does this. It holds the task
graph in registers, written through `tg_*`. For each task it keeps a
release time, a worst-case execution time (WCET), a mask of its
predecessors, and one communication cost for its outgoing edges. Tasks
must be numbered in topological order, so every predecessor has a lower
index; an assertion checks this on every write.

The top level starts the scheduler when `msu_done` ends a
Map-and-Deploy, using the mapping the MSU just applied (`map_out`). It
handles one task per cycle, in index order:

```
ready(t)  = max(release(t), max over predecessors p of finish(p) + c(p,t))
            c(p,t) = weight(p) if p and t run on different PEs, else 0
start(t)  = max(ready(t), time at which PE(t) becomes free)
finish(t) = start(t) + WCET(t)
```

`sched_done` pulses `NTASKS + 1` cycles after `msu_done`. `sched_start`
then holds the start time of every task and `makespan` the latest
finish. With the defaults, a full recovery after an MPM hit therefore
takes 20 + 9 cycles. The processing on a PE is non-preemptive and
follows task index order. Giving each producer a single weight is a
simplification: a real task graph would have one weight per edge.

## Top-level interfaces left to the system

| ports | connect to |
|---|---|
| `pe_in_*`, `pe_out_*` | the PEs' network interfaces |
| `map_req_*` / `map_rsp_*` | the mapping heuristic. `map_rsp_valid` may only answer a pending request, and an assertion checks this. |
| `deploy_*` | whatever loads tasks onto PEs |
| `tg_*`, `sched_*`, `makespan` | task-graph loading and the rebuilt schedule, for whatever dispatches tasks in time |
| `predict_*` | the source of predicted faults |
| `pe_fault_*` | PE test results (e.g. from test programs run through gateway tiles) |
| `aging_*` | aging monitors |
| `cfg_lbdr_*`, `cfg_nd_*` | the offline computation of LBDR bits and NoCDepend rectangles. The source design loads these through iJTAG; here they are plain write ports. |
| `fi`, `link_sa1` | fault injection for tests only |

## Parameters

| parameter | default | meaning |
|---|---|---|
| `COLS`, `ROWS` | 2, 2 | mesh size (the 2x2 example of the source design) |
| `FIFO_DEPTH` | 4 | flits per router input |
| `NREG` | 2 | NoCDepend rectangles per router output |
| `NTASKS` | 8 | tasks per mapping |
| `MPM_ENTRIES` | 8 | stored mappings |
| `TIME_W` | 16 | width of release times, WCETs, weights and start times |

The source design fixes none of these values except the 2x2 example, the
four connectivity bits, the eight routing bits, the one-byte aging value
and the single parity bit. Coordinates are 4 bits wide, so meshes up to
16x16 are supported.

## Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `tb_ft_manycore` runs the whole loop at
the default size: start-up deployment, random traffic, aging, a predicted
fault stored and then hit, a link fault, an arbiter fault, an ignored
report, a dropped packet, and the rebuilt schedule after each
deployment, compared with a reference model. It fails if any of these
never happens. For
example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/ftnoc_pkg.sv tb/tb_ft_manycore.sv --top-module tb_ft_manycore
./obj_dir/Vtb_ft_manycore
```

`tb/mapper_model.sv` is a behavioural stand-in for the mapping heuristic.
It places task `t` on the `(t mod H)`-th healthy PE after a fixed
latency.

## Departures from the source design and what is missing

* **Not built:**
  - the mapping heuristics of the MSU, and the application and routing
    graph models they use. Of the task graph, only what the scheduler
    needs is kept; task criticality is not stored;
  - fault classification and prediction, and the SHMU database;
  - the iJTAG network and the gateways;
  - the offline computation of LBDR bits and NoCDepend rectangles;
  - 3D meshes (routers with up/down ports).

* **Choices this design makes where the source is silent:**
  - packet format (single flit), flow control, FIFO depth, arbitration;
  - the checker properties;
  - the SHM word layout and its 1 = Broken encoding;
  - the hash (CRC-16);
  - which SHM bits each report marks;
  - the impact rule, where only an unused broken PE is ignored;
  - round-robin MPM replacement;
  - the task-graph storage, one cost per producer, and same-PE
    communication at no cost;
  - the start-up Map-and-Deploy.
* A flit with a parity error is still forwarded. The check only reports
  the error.
* Checker reports travel on parallel wires, not over a serial access
  network, so the SHMU sees them a few cycles after the event. Over
  iJTAG this would take far longer.
