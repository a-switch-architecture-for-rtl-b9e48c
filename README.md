# A time-triggered switch core that also races a best-effort copy

In a time-triggered (TT) network, every switch forwards a TT frame at a
precomputed instant: the schedule guarantees the deadline, but the frame
waits for its slot even when the network is idle. Best-effort (BE)
forwarding is as fast as the load allows, but guarantees nothing and can lose
frames. This core combines the two. When a switch receives a TT frame, it
keeps the frame on its schedule and also sends a clone as BE traffic along
the same route. At the last switch, whichever of the two arrives first is
delivered and the other is discarded. Latency can therefore only improve on
the TT schedule, never get worse. Sequence numbers keep the copies in order
and allow at most one copy of each frame in flight. A per-flow jitter setting
holds early copies back when the application needs bounded jitter rather than
minimum latency.

The RTL is the forwarding logic of one switch, written in SystemVerilog
(IEEE 1800-2017). It operates on frame *descriptors*: the Ethernet MACs, the
header parser, the payload memory, the IEEE 1588 clock and the per-port
transmission selection belong to the surrounding TT switch and are not part
of it (see "Outside this RTL").

## One switch, five steps

```
            +------------+  copies  +------------+     +--------------+
 rx  ---->  | classifier |--------->| BE process |---->|  sequence    |---+
descriptor  |  (step 1)  |  +clone  |  (step 2)  |     |  checking    |   |
            +------------+          +------------+     |  (step 4)    |   |
                  | TT frames       static route table +--------------+   |
                  v                                     sequence table    v
            +------------+  frame + release time   +-----------+   +-----------+
            | TT process |------------------------>| TT timer  |-->| per-port  |
            |  (step 3)  |                         | (holds TT |   | queues:   |
            +------------+                         |  frames)  |   | TT, copy  |
              schedule table                       +-----------+   +-----------+
                                                                         | port ready
                                                                         v
                                                 tx_*[p]  <----  +-------------+
                                                                 |  arrival    |
                                                                 |  filtering  |
                                                                 |  (step 5)   |
                                                                 +-------------+
                                                                   filter table
```

1. **Classifier** (`classifier.sv`). A received copy goes to the BE path. A
   received TT frame goes to the TT path, and a clone of it, with `iscopy`
   set, goes to the BE path. Every switch on the route makes its own clone.
   If the BE path is full, the copy is dropped instead of stalling the
   input.
2. **BE process** (`be_process.sv`). The copy's flow-id indexes the static
   route table. If the length and input port match the row, the copy is
   tagged with the row's output port. Otherwise it is dropped. Because of
   this table, copies follow exactly the TT route.
3. **TT process** (`tt_process.sv`). It looks up the schedule table and
   accepts a TT frame only if four things hold: its arrival timestamp lies
   in the flow's arrival window for the current period, its length and input
   port match, and its sequence is larger than the table's. The frame is
   passed on with its release time, `offset + m·period`.
4. **Sequence checking** (`sequence_checking.sv`). A copy is forwarded only
   if its sequence is exactly one more than the sequence table's entry, and
   the entry is then advanced.
5. **Arrival filtering** (`arrival_filtering.sv`). This step is enabled per
   flow, normally only on the switch next to the receiver. It delivers a
   frame only if its sequence is larger than the filter table's entry, so
   the earlier of a TT frame and its copy wins. It also applies the jitter
   hold described below. Filtering happens as a frame *leaves* its port
   queue for the transmitter, not when it enters. A copy that waited in the
   queue until after its TT frame was sent is therefore discarded. This is
   what keeps the TT schedule the worst case even when copies are delayed
   by other traffic.

Between steps 3/4 and step 5 sits the **TT timer** (`tt_timer.sv`). Each
accepted TT frame waits in a per-flow slot until its release time. When it
leaves, the timer also updates the schedule table and the sequence table.
Copies pass straight through the timer.

The top, `swa_switch.sv`, wires these together. It puts a descriptor FIFO
(`frame_fifo.sv`, 8 deep) after the classifier on each path and after the
BE process. After the timer, frames are sorted into two FIFOs per output
port, one for TT frames and one for copies. Each clock, one frame is taken
from a port whose transmitter is ready (`tx_ready`), passed through arrival
filtering and offered on that port's `tx_*`. TT queues are served before
copy queues, and lower ports before higher ones.

## The four tables

| table | per flow | written by | read by |
|---|---|---|---|
| schedule (`schedule_table.sv`) | length, in/out port, period, arrival-start, arrival-end, offset, sequence, *period start* | configuration; sequence at TT release | TT process, arrival filtering |
| static route (inside `be_process.sv`) | length, in port, out port | configuration (copied from the schedule row) | BE process |
| sequence (`sequence_table.sv`) | sequence | sequence checking (set); TT release (raise only) | sequence checking |
| filter (inside `arrival_filtering.sv`) | sequence, jitter, enable | configuration; arrival filtering | arrival filtering |

A single configuration write (`cfg_we`, `cfg_flow`, `cfg_row`,
`cfg_filter_en`, `cfg_jitter`) loads one flow into all four tables and sets
its sequence to 0 in each of them. Sequence numbers must start from their
minimum whenever a flow is (re)configured.

## Why the sequence rules differ between steps

This is the subtle part of the design. Three different comparisons are used.

* **TT process and arrival filtering use `seq > stored`.** TT frames and
  delivered frames only need to be *new*. If a TT frame is lost somewhere, the
  next one must still be accepted, so a gap is allowed.
* **Sequence checking uses `seq == stored + 1`.** A looser test would break
  things. Suppose copy *m* is lost and copy *m+1* overtakes TT frame *m*. If
  copy *m+1* were accepted, it would reach the last switch first. The filter
  would then record *m+1*, and TT frame *m* would be thrown away: a TT frame
  lost because of the BE path. The strict test drops copy *m+1* instead.
* **The TT side restores the sequence table.** When TT frame *m* leaves a
  switch at its scheduled instant, the switch raises its sequence-table entry
  to *m* (`tt_timer` drives the restore port of `sequence_table`). From then
  on, copy *m+1* is "next" again. A lost copy therefore blocks copies only
  until its TT frame passes, which is the self-recovery property.
  Self-recovery also needs the schedule to keep the TT frame less than one
  period (plus the minimum per-hop forwarding times) behind the copy. That
  is a constraint on the offline schedule, not on the hardware.
* **Only one copy travels at a time.** Every switch clones every TT frame,
  but a downstream switch's own clone of frame *m* arrives after the
  upstream copy *m* has already advanced the entry, so it fails `== +1` and
  is dropped.

The table rows hold 32-bit sequences. Wrap-around is not handled: a flow
would need 2^32 periods to get there.

## Time: periods, release and the jitter hold

The design takes a 48-bit nanosecond time `now` from the switch's
synchronised clock. Schedule values (arrival window, offset) are relative to
the start of the flow's period, and the *m*-th period starts at
`m·period` of the synchronised time.

A divider would be needed to turn this into absolute times. Instead, the
schedule table keeps a **period start** register per flow, which advances by
one period whenever `now` reaches `start + period`. The TT process checks
`arrival_time − start` against the window. If the tracker has already moved
on to the next period, it uses the previous one. The release time is
`start + offset`. After a configuration write the period start is 0 and
catches up by one period per clock. Until it has caught up, frames of that
flow can be dropped; the end-to-end test sees exactly this when it
reconfigures a switch with traffic running.

The TT timer releases a frame in the first clock in which `now ≥ release`,
so release precision is one clock period. When several flows are due in the
same clock, they leave one per clock, lowest flow-id first. A correct TT
schedule never makes them collide on one port.

**Jitter hold.** With the copies, delivered latency ranges from "copy with
no queueing" to "TT frame". Where that spread is too large, the filter table
holds a per-flow `jitter`. A copy that passes the filter before
`start + offset − jitter` (the departure instant of its TT frame from this
switch, minus jitter) is parked in a per-flow slot until that instant. A
later copy is delivered at once, and TT frames are never held. Delivered
latency then lies within `[offset − jitter, offset]`. Two values are
special: `jitter < 0` drops all copies (TT only), and `jitter > period`
places no bound. The filter entry is updated when the copy enters the hold,
so the TT frame that follows is discarded.

A jitter value is *safe* if a held copy can never collide with a TT frame or
another held copy on the port. For each flow *i*, the bound is
`min_j (g_ij − C_j)`, where `g_ij` is the smallest gap from a departure of
flow *j* to a departure of flow *i*, and `C_j` is flow *j*'s transmission
time. This bound is computed offline and is not part of the RTL. For the
evaluated schedule at the last switch, with `C = (length + 24) · 80 ns`, the
bound is 321664 ns for flow 1, 47232 ns for flow 2 and 77952 ns for flow 3.
The published range for flow 1 (442496 ns) equals the term from flow 2 alone.
The term from flow 3 (364544 − 42880 = 321664 ns) is smaller. The 10 µs
jitter used in the evaluation is safe either way.

## Interface of `swa_switch`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset (all tables cleared) |
| `now` | in | synchronised time, ns (48 bit) |
| `swa_en` | in | 0: plain TT switch (no clones, received copies dropped) |
| `restore_iscopy` | in | clear `iscopy` of frames delivered by a filtering flow |
| `cfg_*` | in | one-flow configuration write (see tables) |
| `rx_valid/rx_ready/rx_frame` | in/out/in | received descriptors of all ports, with arrival timestamp |
| `tx_valid/tx_ready/tx_frame [24]` | out/in/out | delivered descriptors per output port; `tx_ready[p]` = the port's transmitter can start a frame now |
| `stats` | out | counters: clones, drops at each step, holds, egress drops, slot overruns |

A descriptor (`swa_pkg::frame_t`) carries the fields the steps need:
flow-id (8 bit), sequence (32), payload length in bytes (11), input and
output port (5 each), arrival time (48), `iscopy`, and a 12-bit handle to the
payload in the switch's frame memory. All handshakes are valid/ready. A
block that drops a frame consumes it in the cycle it is offered. A frame
that is forwarded waits for `ready`. One exception is on `tx_*`: only ports
whose `tx_ready` is high are served, so `tx_valid[p]` depends on
`tx_ready[p]`. The transmitter must therefore drive `tx_ready` from its own
state (link idle, gate open) and not from `tx_valid`.

**Latency.** With empty queues, a copy is offered on `tx` three clocks after
it is taken on `rx`: it passes the copy FIFO, the routed-copy FIFO and its
port's copy FIFO. A TT frame is offered one clock after it leaves the timer.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NUM_PORTS` | 24 | the evaluated switches have 24 Fast Ethernet ports |
| `NUM_FLOWS` | 16 | this design's choice; flow-ids ≥ 16 have no table row and are dropped |
| `QUEUE_DEPTH` | 8 | this design's choice (FIFOs between steps) |
| `EGRESS_DEPTH` | 8 | this design's choice (per-port TT and copy queues) |

Field widths are fixed in `swa_pkg.sv`. All tables are register arrays
with combinational reads, which is reasonable for tens of flows. For
hundreds of flows they would become block RAMs with a pipelined lookup.

## Outside this RTL

* Ethernet MACs/PHYs and the parser that extracts flow-id, sequence and
  `iscopy` from a frame. The source gives no header format for these fields.
* The IEEE 1588 clock that produces `now` and the arrival timestamps.
* The payload memory that `buf_id` points into.
* The port transmitters and their gate control: the 802.1Qbv guard band
  that keeps the link free at each TT departure, and the priority of copies
  relative to other BE traffic (which does not pass through this core). The
  core sees these only through `tx_ready`. The priority matters a lot for
  the gain: copies with higher priority than other BE traffic always win,
  while with equal priority the gain shrinks as BE load grows.
* The offline scheduler and the safe-jitter computation.

## Choices this RTL makes where the description is silent

* Before the timer, the per-port copy queues become one queue whose
  descriptors carry their output port. After the timer, the algorithms have
  one queue per port shared by TT frames and copies. This RTL uses two
  queues per port, with TT frames served first, so that a TT frame never
  waits behind copies.
* BE-path congestion drops copies instead of applying back-pressure. This
  happens in the classifier when the copy FIFO is full, and at a full port
  queue. A full TT port queue drops TT frames as well, and counts them.
* A single filtering unit serves all ports, one frame per clock. A held
  copy whose port is not ready when its release time comes blocks the other
  ports until the port is ready.
* Arrival windows and offsets are relative to the flow's period start, and
  the period-start tracker replaces a divider.
* Schedule sequences are updated when the TT frame is released, as in the
  algorithm. A duplicate TT frame arriving before that release would
  overwrite the pending slot (counted as an overrun).
* Filtering is enabled per flow in the filter table. `swa_en` and
  `restore_iscopy` are global inputs.
* Same-cycle conflicts are resolved as follows: a released TT frame goes
  before a copy; a released held copy goes before a newly arriving frame;
  in the sequence table the larger of two simultaneous writes is kept.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_frame_fifo` | order, count, full flag and one-cycle latency against a reference queue under random traffic |
| `tb_classifier` | routing by `iscopy`, clone content, drop-on-full, `swa_en` |
| `tb_be_process` | route match, output-port tagging, drop count |
| `tb_schedule_table` | read ports, period-start tracking over random time jumps, sequence update and clear |
| `tb_tt_process` | window, length, port and sequence checks; release time `m·period + offset`, including a period tracker one period ahead |
| `tb_sequence_table` | set / raise-only / clear against a reference model |
| `tb_sequence_checking` | the `== +1` rule and table writes under back-pressure |
| `tb_tt_timer` | release in the first cycle at release time; table update; TT before copy; several due flows; back-pressure |
| `tb_arrival_filtering` | first-arrival filtering, jitter hold timing, `jitter < 0`, `jitter > period`, disabled flows, `iscopy` restore |
| `tb_swa_switch` | end to end, three switches, default parameters |
| `tb_swa_scenarios` | the same three switches with other BE traffic on the links, swept from 0 to 100 Mbit/s |

`tb_swa_switch` chains three `swa_switch` instances like the evaluation
platform, uses its three flows (128/256/512 bytes, periods 524288/1048576/
2097152 ns) and its per-switch schedule, and models links at descriptor
level. A link adds 500 ns until the first bit and (length + 24)·80 ns until
the frame is fully received. The test runs ten periods of the longest flow
in four phases:

| phase | what happens | flow-1 latency seen |
|---|---|---|
| SWA off | every frame leaves at its scheduled instant | 67600 ns |
| SWA on | copies win | 38160 ns |
| copies lost between switch 1 and 2 | switch 2 starts new copies | 38160–47984 ns |
| jitter 10 µs at the last switch | copies held to offset − 10 µs | 57584 ns |

The test checks order and exactly-once delivery throughout. It also checks
that each mechanism occurred: cloning, route-check drop, TT-window drop,
sequence-check drop of a duplicate copy, filtering of the later arrival,
early delivery, copy loss with recovery, and jitter hold. In this test the
transmitters are always ready.

`tb_swa_scenarios` adds the competing traffic. Each link gets a transmitter
model. It sends TT frames at once in their reserved slots. Copies and 64-byte
BE frames (0, 30, 60, 90 and 100 Mbit/s, in a 16-frame queue with tail drop)
share the rest of the link one frame at a time. The test runs two periods of
the longest flow per load point. It checks order and exactly-once delivery,
and that no frame is ever later than the TT schedule (within 200 ns). Other checks depend on
the sweep:

| sweep | competing traffic | flow-1 latency, 0 → 100 Mbit/s | checked |
|---|---|---|---|
| copies first | on all links | 38660 → 42100–45668 ns | > 10 µs below the schedule (68084 ns) at every load |
| round robin | on all links | 38660 → 42052–45540 ns | copies still win |
| other BE first | on all links | 38660 → 68116 ns | copies go stale and are dropped; latency falls back to the schedule, never above it |
| round robin | TTS-1 → TTS-2 link only | 38660 → 39316–42884 ns | the next switch restores the gain |
| round robin, jitter 10 µs | on all links | 58084 → 58644–64532 ns | max − min ≤ 10 µs for every flow |

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl +libext+.sv \
          --top-module tb_swa_switch rtl/swa_pkg.sv tb/tb_swa_switch.sv
./obj_dir/Vtb_swa_switch
```

The end-to-end test takes about 20 s and the scenario sweep about 2.5 min.
The block tests take well under a second each.
