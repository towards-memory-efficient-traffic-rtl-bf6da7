# FooDog: per-stream policing of time-sensitive traffic with period-wise gate lists

In a Time-Sensitive Networking (TSN) switch every time-sensitive stream is
planned offline. Each frame of a stream has a known time window in which it
should arrive at each hop. Per-Stream Filtering and Policing (PSFP) drops
frames that arrive outside their window. Such frames come from senders with
drifting clocks, lost synchronisation or faulty sensors. Without PSFP they
would take the queue slots planned for other streams and destroy their
sub-microsecond jitter.

The straightforward PSFP gives every stream its own gate control list (GCL),
with three entries per frame of the network cycle. The network cycle is the
least common multiple of all stream periods. A 1 ms stream in a network whose
cycle is 100 ms therefore needs about 200 entries, per port. The memory grows
with the number of streams, the number of frames per cycle and the number of
ports. With a few hundred streams it can exceed the block RAM of an FPGA.

FooDog, the design implemented here, stores only the **first** window of each
stream. It relies on the planning algorithm making every stream strictly
periodic, on the same queue at every frame. Under that rule, all later windows
of a stream are the first one shifted by whole periods. Streams are grouped by
period, and each group's short list is replayed once per period. The memory
then depends only on the number of streams and ports, not on the network
cycle:

    per port:  2 x N entries of {updateTime 32, gateID 9, gateState 1, queueID 3}
             +     N entries of {gateState 1, queueID 3}

This RTL is a description of that architecture. The sizes are those of the
published prototype: 4 ports, 500 streams per port, 8 stream periods, 1000
list entries per period, and a 64-bit frame descriptor.

## Two planes, two tables

FooDog separates *keeping* the gate states from *using* them.

* **Period-wise GCL** (`period_wise_gcl`), one per stream period. Each entry
  is `{updateTime, gateID, gateState, queueID}`: at time `updateTime` within
  the period, set gate `gateID` to `gateState` and queue `queueID`. Every
  stream has two entries, one opening its window and one closing it. The
  entries are sorted by `updateTime`.
* **Stream-wise GCL** (`stream_wise_gcl`), one per port. Entry *i* is the
  present `{gateState, queueID}` of the gate of stream *i*. Each stream owns
  one gate, and the gate index equals the streamID.

The **update plane** writes the period-wise GCLs into the stream-wise GCL as
time passes. The **police plane** only reads the stream-wise GCL, one read per
frame. The two planes never compete for the same port of a RAM: both RAMs are
simple dual-port memories with one write port and one read port.

### Update plane: how a gate opens and closes

Each period has an **update unit** (`update_unit`, UU). A UU holds three
parts:

* `time_count` makes the time inside the period. It restarts at 0 on the
  switch's `network_cycle_start` pulse and after every `pgcl_cycle` ticks. It
  pulses `cycle_start` whenever the time becomes 0.
* `gate_update` is the engine. It keeps `addr_ptr`, the next entry due. In
  every clock it compares that entry's `updateTime` with the time. When the
  time has reached `updateTime`, it offers `{gateID, gateState, queueID}`. On
  acceptance it advances `addr_ptr`. Because the list is sorted, it never looks
  past that one entry. After the last valid entry (`pgcl_len`) it waits. On
  the next `cycle_start` it goes back to entry 0.
* the RAM of the period-wise GCL.

All UUs may have an entry due in the same clock, but the stream-wise GCL has
one write port. `gate_update_control` therefore accepts one offer per clock,
round robin, and writes it to address `gateID`. The other units hold their
offer until they are served. No two units ever write the same gate, because
each stream belongs to exactly one period.

Worked example, with two periods and three gates:

| 1 ms list: updateTime | gateID | gateState | queueID |
|---:|---:|---|---:|
| 5  | 0 | open   | 1 |
| 8  | 2 | open   | 0 |
| 13 | 2 | closed | – |
| 14 | 0 | closed | – |

| 100 ms list: updateTime | gateID | gateState | queueID |
|---:|---:|---|---:|
| 6  | 1 | open   | 0 |
| 13 | 1 | closed | – |

Gate 0 is open during [5, 14) of every 1 ms period, and gate 2 during [8, 13).
Gate 1 is open during [6, 13) of every 100 ms period. At time 13 both units
have an entry due. GateUpdateControl writes one of them in that clock and the
other in the next. `tb_foodog` runs this example with periods of 20 and 2000
ticks.

### Police plane: how a frame is judged

`policing_enforce` takes the streamID from each frame descriptor and reads
that gate from the stream-wise GCL. It then rewrites the descriptor:

* gate open: `discard = 0`, `queueID` = the gate's queue;
* gate closed: `discard = 1`, and `queueID` is also copied from the gate
  (it has no meaning then).

A streamID of 500 or more has no gate. Such a descriptor passes unchanged and
`desc_out_bypass` is set. This covers traffic that is not time-sensitive.

## Hierarchy

```
foodog_switch_policing        one policer per port (NUM_PORTS = 4)
└── foodog                    one port
    ├── update_unit x NUM_UU  (8)
    │   ├── time_count
    │   ├── gate_update
    │   └── period_wise_gcl   PGCL_DEPTH x 45 bit (1000)
    ├── gate_update_control   round-robin writer
    ├── stream_wise_gcl       N_STREAMS x 4 bit (500), cleared after reset
    └── policing_enforce      2-stage lookup pipeline
foodog_pkg                    widths, entry structs, descriptor layout, config word
```

In the switch, each port's policer sits between that port's ingress parser
and the switching fabric. The ingress parser, fabric, buffer manager, egress
(time-aware) schedulers and management block belong to the host switch and
are not part of this RTL. Their signals are the ports of
`foodog_switch_policing`.

## Interfaces

**Time.** `time_tick` is one unit of the synchronized network time, the unit
of every `updateTime` and `pgcl_cycle`. `network_cycle_start` marks the start
of a network cycle. Both are shared by all ports and units. They must come
from the switch's time-synchronisation logic. `network_cycle_start` must
coincide with a tick boundary of every period, which holds because the
network cycle is a multiple of every period.

**Descriptor** (64 bits, one per clock per port, no backpressure):

| bits | field |
|---|---|
| [13:0] | streamID (read) |
| [16:14] | queueID (written) |
| [17] | discard (written) |
| [63:18] | passed through unchanged |

**Configuration** (`cfg_t`, from the management block; `cfg_port` selects the port):

| `kind` | effect |
|---|---|
| `CFG_PGCL_ENTRY` | write `data[44:0]` as entry `addr` of the list of unit `uu` |
| `CFG_PGCL_CYCLE` | set the period of unit `uu` to `data[31:0]` ticks |
| `CFG_PGCL_LEN` | set the number of valid entries of unit `uu` (0 = idle, the reset value) |

A list must be sorted by `updateTime`, and every `updateTime` must be smaller
than its unit's period. Load the lists before `network_cycle_start`. A list
changed while its unit runs may apply one stale entry.

**Filling the lists.** The planner gives ω, the time at which the upstream
device sends a stream's first frame of the network cycle. The stream's window
at this port then opens at ω + MinDly − δ and closes at ω + MaxDly + δ.
MinDly and MaxDly bound the link delay, and δ is the synchronisation
precision. Both values are taken modulo the period. A window that wraps past
the end of the period gives a closing entry near the start of the list and an
opening entry near its end. In the first period after `network_cycle_start`,
such a gate stays closed until its opening entry.

## Timing

| path | clocks |
|---|---|
| reset to `init_done` (all gates closed) | N_STREAMS (500) |
| time reaches `updateTime` → entry offered | 0, same clock as the time changes |
| offer accepted → stream-wise GCL written | 2 (registered grant, then RAM write) |
| new gate state → seen by a frame entering | the frame must enter at least 2 clocks after acceptance |
| descriptor in → descriptor out | 2 |
| entries per clock per unit / per port | 1 / 1 |

If k units have entries due in the same clock, the last one is applied k − 1
clocks late. At one tick per clock, the largest delay is one entry per list
due at once: 7 clocks. This is far below the window guard of a typical plan,
δ ≈ 48 ns.

## Memory at the default size

Per port: 8 × 1000 × 45 = 360,000 bits of period-wise GCL, plus 500 × 4 =
2,000 bits of stream-wise GCL. Four ports give 1,448,000 bits. With 500
streams the lists need only 2 × 500 = 1000 entries in total, but the prototype
gives every one of its eight periods 1000 entries. Then any split of streams
over periods fits without re-synthesis. A design that is tied to one stream
mix can cut the total to 2N × 45 + 4N bits per port (47 kbit for 500 streams)
by sizing each list for its own period. The memory figures reported for the
prototype (under 0.39 Mbit per switch) are far below what eight lists of 1000
entries take on four ports. They probably come from a build sized this way.
The RTL keeps the 8 × 1000 organisation that the prototype description gives.

## What follows the source design and what is this implementation's own

The source design gives these parts:

* the division into update units, GateUpdateControl, stream-wise GCL and
  PolicingEnforce;
* the entry fields and their widths;
* 500 streams, 8 periods and 1000 entries per list;
* the 64-bit descriptor with 3-bit queueID, 14-bit streamID and 1-bit discard;
* the rule discard = NOT gateState, with queueID copied from the gate;
* replaying each list once per period, with the time restarting at
  `network_cycle_start`;
* one policer per port, in the ingress path.

This implementation chose the following. The source gives no detail for them:

* **When an entry applies.** One passage of the description says an entry is
  applied when its time "has expired". Another says when updateTime is
  *greater* than the current time. The second reading would apply future
  entries at once, so the RTL applies an entry when time ≥ updateTime.
* **What triggers an update.** One sentence of the description says the
  period-wise contents reach the stream-wise GCL "when a frame arrives". The
  engine description says updates are time-triggered. The RTL follows the
  second: frame arrivals never touch the update plane.
* **Per-clock comparison.** The engine compares in every clock, not only when
  the time changes. Entries that share one `updateTime` therefore drain one
  per clock.
* **End of list.** `pgcl_len` gives the number of valid entries. After the
  last one, the engine waits for the next period before it reads entry 0
  again.
* **The `time_tick` input.** It defines the time unit, and time restarts at 0
  on each `network_cycle_start`.
* **Handshake.** Offers use valid/ready. GateUpdateControl serves the units
  round robin.
* **Start state.** After reset the stream-wise GCL is swept so that every gate
  starts closed.
* **Descriptor bit positions and configuration word format.** Both are this
  implementation's own (see the tables above).
* **Descriptors without a gate** pass unchanged, with `desc_out_bypass` set.
* **Pipeline latencies** are as in the timing table.
* **Discard is overwritten.** A descriptor that the ingress parser marked
  discard and that arrives while its gate is open leaves with discard = 0. The
  source design states this rule literally. A switch that uses the discard bit
  for other reasons may want to OR it instead; the change is one line in
  `policing_enforce`.

## Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. To build and
run one with Verilator:

```
verilator --binary --timing --assert --top-module tb_foodog_switch_policing \
    -Irtl -y rtl -y tb rtl/foodog_pkg.sv tb/tb_foodog_switch_policing.sv
./obj_dir/Vtb_foodog_switch_policing
```

| testbench | what it establishes |
|---|---|
| `tb_time_count` | time, wrap and restart against a reference counter; one `cycle_start` per period |
| `tb_period_wise_gcl` | full-depth RAM contents, read-before-write, writes out of range ignored |
| `tb_gate_update` | the 1 ms example list: every entry offered in the exact clock, tied times drained, replay every period, offers held under backpressure, idle when empty |
| `tb_update_unit` | a loaded unit replays a 40-entry list for several periods, no entry early or late |
| `tb_gate_update_control` | one grant per clock, round-robin order, every offer written exactly once, held off before init |
| `tb_stream_wise_gcl` | clearing sweep of exactly 500 clocks, random write/read against a model |
| `tb_policing_enforce` | pass, discard and bypass rewriting, 2-clock latency, order |
| `tb_foodog` | the two-list example end to end, against the window table |
| `tb_workloads` | one port at full size on the evaluated stream mixes (100/300/500 streams, 10/50/90 % at 1 ms, 100 ms otherwise, one tick = 1 us) for a whole 100 ms network cycle each, and the five-stream scenario in which one 1 ms stream drifts at 24 ms: all its later frames dropped, the other four untouched over 120 ms |
| `tb_port_sweep` | the stage built with `NUM_PORTS = 16`, every port loaded with 500 streams (90 % at 1 ms, 900 entries in one list), 5 ms of random traffic on all ports; windows differ per port, so configuration reaching a wrong port would show |
| `tb_foodog_switch_policing` | full size (4 ports × 500 streams × 8 periods), one whole 100,000-tick network cycle plus a restart: see below |

The full-size test gives each port 500 streams over periods of 1000 to
25,000 ticks and loads 1000 list entries per port. It then sends random
descriptors on all four ports, about 240,000 in all. Each frame is checked
against the window table, except frames within 16 ticks of a window edge. On
port 0, one stream keeps sending in its window. A second stream moves its
frames half a period off after tick 30,000, like a sender with a broken
clock. Every frame of the second stream must then be dropped, and the first
stream must not lose a frame. The test also counts each mechanism and
requires every one to occur:

* frames passed;
* frames discarded;
* descriptors bypassed;
* update units held back by GateUpdateControl;
* frames passed in a repeated period;
* frames passed after a second `network_cycle_start`.

It runs in a few seconds.

## Limits

* The policer judges frames only by time. It cannot tell an early frame
  caused by a clock fault from a legitimate one, so it drops both. Frames that
  must still be delivered in such cases need a redundancy scheme such as frame
  replication.
* The policer can only enforce strictly periodic streams. Every frame of a
  stream must use the same queue at each hop. The traffic plan must respect
  this.
* Descriptors have no backpressure. The policer accepts one descriptor per
  clock per port, at all times.
* The simulations were run with Verilator, which models only 0 and 1. Reset
  values were checked by starting every register and memory at random values.
