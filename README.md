# ALBUS burst monitor in SystemVerilog

A burst-flood attack hides a volumetric DDoS attack inside a swarm of
short, medium-rate bursts. Each burst lasts a fraction of a second and
is only modestly above what a well-behaved flow may send. Sketches
based on counting over fixed windows miss such bursts or flag many
legitimate flows. ALBUS handles this with *leaky buckets*. A flow may
send at a sustained rate γ with an extra allowance β on top. A flow is
flagged when its bucket, which drains at γ and grows by each packet's
size, rises above β. Memory is scarce, so buckets are not given to
every flow. Flows compete for a fixed table of cells. A second, cheaper
counter in each cell, the *background counter*, chooses which flow in a
cell deserves the bucket.

This repository holds a packet-rate hardware pipeline for that
algorithm. Every clock it accepts one packet's metadata: flow key, size
and arrival timestamp. Fourteen clocks later it outputs whether the
packet's flow is reported as excessively bursty. The structure follows
a published FPGA design for the algorithm:

- a keyed hash of the flow key;
- a one-hot selection of 1 of 1024 cells;
- 1024 cells that work in parallel;
- a wide AND that combines their verdicts.

At a 5 ns clock this is 200 million packets per second.

## The cell: a leaky bucket and a background counter

Each cell holds two records:

| record | fields | width |
|---|---|---|
| leaky bucket (LB) | valid, flow ID, timestamp, −∞ flag, count | 1 + 24 + 32 + 1 + 16 bits |
| background counter (BC) | valid, flow ID, count | 1 + 24 + 16 bits |

The fields take 14 bytes, plus three flag bits. The published memory
budget of 16 bytes per cell uses the same field sizes. A packet
carries a flow ID f, a size s in bytes and a time t. It updates only
its own cell. Time is counted in *drain units*; see the next section.
Write d = t − LB.t for the amount the bucket has drained since its last
update.

| # | condition | action | event code |
|---|---|---|---|
| 0 | LB empty | LB ← (f, t, s) | `LB_ASSIGN` |
| 1 | LB holds f and c' = max(LB.c − d, 0) + s > β | **report f**; pull the BC flow into the LB; clear the BC | `REPORT` |
| 2 | LB holds f and s > d | LB ← (f, t, c') | `LB_KEEP` |
| 3 | LB holds f, otherwise | evict f; pull the BC flow into the LB | `LB_EVICT` |
| T | LB holds another flow, not updated for longer than the time-out β/γ | evict the LB flow; pull the BC flow if it is not f; apply the packet | `TIMEOUT` |
| 4 | LB holds another flow, BC empty | BC ← (f, s) | `BC_ASSIGN` |
| 5 | BC holds f, BC.c + s ≤ T | BC.c += s | `BC_INC` |
| 7 | BC holds f, BC.c + s > T | **push**: LB ← (f, t, s), BC ← (old LB flow, old LB count) | `PUSH` |
| 6 | BC holds another flow, decay drawn | BC.c −= s; if that goes below 0, BC ← (f, s) | `BC_DECAY` / `BC_REPLACE` |
| 6 | BC holds another flow, no decay drawn | nothing | `BC_SKIP` |

Case 3 evicts a flow whose bucket has drained by at least this packet's
size. Such a flow is not currently bursting, so it gives way.

"Pull" moves the BC's flow into the LB with count 0 and timestamp −∞.
In hardware the −∞ timestamp is a flag bit next to a real timestamp,
the time of the pull. An infinitely old bucket has drained completely,
so the pulled flow's first packet sets the count to s and is kept. The
stored pull time still serves the time-out check.

The background counter is a decayed majority vote. A flow that keeps
sending into the cell pushes other flows' counts down. Once its own
count passes the *push threshold* T, it takes the bucket. The old
bucket flow and its count move down into the BC.

The decay is drawn with probability 0.1^r, where r is the *rigidity*.
The design default is r = 0: every foreign packet decays the count,
and `BC_SKIP` never happens.

All arithmetic is unsigned, and counts saturate at 65,535. c − d + s
uses one carry-save step and one carry-propagate adder. Every case
decision depends only on the cell's own registers and the request. So
two packets to the same cell in consecutive clocks are handled exactly:
the second one sees the state the first one left.

## The drain clock

The bucket drains γ·Δt bytes between two packets of a flow. Giving each
of the 1024 cells a multiplier would be wasteful. γ is the same for
every flow, so the design multiplies once per packet, centrally, in
`drain_timebase`:

- γ is given in bytes per nanosecond as an unsigned Q0.32 fraction.
  1 Mbit/s = 1.25·10⁻⁴ B/ns gives `cfg_gamma = 536871`.
- For each packet, the gap to the *previous packet of any flow* is
  multiplied by γ and added to a Q32.32 accumulator.
- The accumulator's integer part is the packet's time in drain units,
  called the *drain clock*.

A cell stores the drain clock in its LB timestamp and gets d by one
subtraction. Everything else follows from this:

- The time-out β/γ becomes simply "d > β".
- Both the ns input and the drain clock wrap modulo 2³², and
  differences are taken modulo 2³².
- The input timestamps must therefore be non-decreasing, with gaps
  under 4.29 s.
- A bucket that sits idle for 2³² drain units or more (9.5
  hours at 1 Mbit/s) aliases. The time-out removes such buckets long
  before that in any cell that sees traffic.

## Hashing and cell selection

`xoodoo_nc_hash` maps the 104-bit flow key (an IPv4 5-tuple) and a
128-bit secret key to a 96-bit digest. It uses rounds of the Xoodoo
permutation: a 384-bit state of 3×4 lanes of 32 bits, with the steps
θ, ρ-west, ι, χ and ρ-east and the standard round constants. The
pipeline has one round per register stage, 12 stages by default, and
accepts a new key every clock.

Initial state:

| plane | content |
|---|---|
| 0 | secret key |
| 1 | flow key, zero-extended to 128 bits |
| 2 | the constant 1 |

The digest is the low three lanes of plane 0 after the last round. Of
the digest:

- bits 9:0 select the cell;
- bits 33:10 are the 24-bit flow ID stored in the cell.

A flow is therefore identified by a 24-bit fingerprint, not by its full
key. Two flows in the same cell with equal fingerprints are treated as
one flow; the chance of that is about 2⁻²⁴ per pair.

`onehot_rom` turns the index into the 1024-bit select vector. It is a
1024×1024-bit memory whose word i holds the bit pattern 1 << i, read
through a registered port. Bit i of the vector, ANDed with the packet's
valid bit, is cell i's `sel`.

## Pipeline, interface and timing

```
in_* ──► hash (NROUNDS stages) ──► one-hot ROM ┐
     └─► key/size/ts delay line ─► drain clock ├─► 1024 cells ─► AND / OR ─► out_*
                                   decay draw ┘     (1 clock)      (register)
```

Ports of `albus_top`:

| port | dir | width | meaning |
|---|---|---|---|
| `in_valid` | in | 1 | a packet is presented this clock |
| `in_key` | in | 104 | flow key |
| `in_size` | in | 16 | packet size in bytes |
| `in_ts_ns` | in | 32 | arrival time in ns, non-decreasing modulo 2³² |
| `cfg_hash_key` | in | 128 | secret hash key |
| `cfg_gamma` | in | 32 | γ in B/ns, Q0.32 |
| `cfg_beta` | in | 16 | β in bytes; also the time-out in drain units |
| `cfg_push_t` | in | 16 | push threshold T in bytes |
| `out_valid` | out | 1 | result for the packet that entered NROUNDS+2 clocks earlier |
| `out_key` | out | 104 | that packet's flow key |
| `out_idx` | out | 10 | its cell |
| `out_event` | out | 4 | the case it took (`albus_pkg::albus_event_e`) |
| `out_report` | out | 1 | its flow was reported (the AND of all ok lines was low) |

The design accepts one packet per clock with no stalls. The latency is
NROUNDS + 2 clocks, 14 at the defaults:

- NROUNDS clocks of hash;
- 1 clock in which the ROM read, the drain clock and the random draw
  happen;
- 1 clock in which the cell updates and the result is registered.

Other timing rules:

- The configuration inputs are meant to be static.
- The asynchronous active-low reset clears all buckets and counters.
- Two concurrent assertions check that the drain clock stays in step
  with the packets and that the select vector is one-hot.

Parameters of `albus_top`:

| parameter | default | meaning |
|---|---|---|
| `IDX_W` | 10 | 2^IDX_W cells |
| `NROUNDS` | 12 | Xoodoo rounds |
| `RIGIDITY` | 0 | integer r |

`decay_rng` is a 32-bit Galois LFSR that advances once per packet. A
decay is drawn when its low 16 bits fall below round(65536/10^r).

## Departures from the published design

- **Hash construction.** The published design names its hash
  "Xoodoo-NC" with a 96-bit digest but does not give how keys are
  absorbed or how many rounds are used. The absorption and the 12
  rounds here are this design's own. The digest bits are therefore
  not those of the original.
- **Flow ID and field widths.** The 24-bit flow ID, 32-bit timestamp
  and 16-bit counts follow the published memory budget of 16 bytes
  per cell. The flow ID is taken from the digest; the original does
  not say where it comes from.
- **β range.** Because counts are 16 bits, β and T must stay below
  64 KiB. Evaluations with β = 70–90 KB would need 17-bit counts.
- **Drain clock.** The drain clock and its fixed-point γ are this
  design's way to avoid per-cell multipliers. The 32-bit LB timestamp
  therefore holds drain units, not nanoseconds as in the original. The original specifies
  the arithmetic, not the circuit.
- **Polarity of the AND.** Each cell drives an active-high "ok". The
  AND of all cells is low exactly when the selected cell reports. The
  original shows an AND gate but not the polarity of its inputs.
- **Small choices the algorithm leaves open:**
  - A pulled flow's first packet is kept.
  - On a time-out, the packet is applied to the cell as it is after
    the eviction.
  - The push test uses the grown BC count.
  - A decay subtracts the packet size.
  - Counts saturate.
- **Rigidity.** r is an integer parameter. Fractional values such as
  r = 0.5, used in some evaluations, cannot be set.
- **Size.** 1024 cells hold 16 KB of state. The software evaluations
  used 300 KB (18,750 cells) or more. Changing `IDX_W` scales the
  table, at the cost of one register set per cell.
- **Not built.** The board's network interface and the switch that
  would deliver packet metadata are not part of this RTL. Their data
  arrive on the `in_*` ports.

## Files

| file | content |
|---|---|
| `rtl/albus_pkg.sv` | widths, record types, event codes, default constants |
| `rtl/xoodoo_nc_hash.sv` | pipelined keyed hash |
| `rtl/onehot_rom.sv` | index to one-hot select memory |
| `rtl/drain_timebase.sv` | ns timestamps to drain clock |
| `rtl/decay_rng.sv` | decay draw with probability 0.1^r |
| `rtl/albus_cell.sv` | one LB + BC cell and its case logic |
| `rtl/albus_top.sv` | the full pipeline |
| `tb/albus_ref_pkg.sv` | independent reference models: Xoodoo, drain clock, cell algorithm |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the burst-flood workload |

`tb_albus_top` runs the full-size design at the base configuration:

- γ = 1 Mbit/s, β = 50 KB, T = 10 KB, r = 0, 5 ns clock;
- about 20,500 packets, with gaps from 0 ns to 0.6 s;
- 16 contending flows, four each in four cells, found with the
  reference hash;
- random background flows;
- a final burst phase.

It checks every output against the reference model, and checks the
latency of 14 clocks. It fails if any case of the table other than
`BC_SKIP` never occurs, if no flow is reported, or if no two
consecutive packets hit the same cell.

`tb_albus_burst_flood` runs a burst-flood attack through the full-size
design. Its traffic is the base evaluation scenario, scaled so that the
load per cell matches a 300 KB monitor on a 10 Gbit/s link:

- 2,075 attack bursts, each from its own flow: 200 ms of 1000-byte
  packets at 3.4 Mbit/s, an overuse ratio of 1.2 over the allowance;
- about 43,000 short background flows, 0.55 Gbit/s in total, none of
  which can exceed β;
- a 5 s observation interval;
- 614,185 packets in all.

Every output is checked against the reference model. The testbench
fails if any compliant flow is reported. With the seed used it detects
1,641 of the 2,075 bursts, a recall of 0.79, and reports no compliant
flow. The run takes about 20 s after a one-minute build.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/albus_pkg.sv tb/albus_ref_pkg.sv \
    rtl/xoodoo_nc_hash.sv rtl/onehot_rom.sv rtl/drain_timebase.sv \
    rtl/decay_rng.sv rtl/albus_cell.sv rtl/albus_top.sv \
    tb/tb_albus_top.sv --top-module tb_albus_top -o sim
./obj_dir/sim
```

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and ends with
`$finish`. `-Wno-fatal` keeps width warnings in the testbenches'
integer arithmetic from stopping the build. A watchdog ends a hung run with a failure. To run another
testbench, replace `tb/tb_albus_top.sv` and the top-module name with,
for example, `tb/tb_albus_cell.sv` and `tb_albus_cell`.

Timing on a typical machine:

- The full design builds in about a minute and runs in about a second.
- The block testbenches each take a few seconds.
