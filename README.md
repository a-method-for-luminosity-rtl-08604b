# Luminosity accumulators on VELO real-time clusters

The LHCb vertex locator (VELO) reconstructs its pixel hits into clusters
inside the readout-board FPGAs, at the full 40 MHz bunch-crossing rate. Once
clusters exist in hardware, luminosity can be measured there as well. Pick
small fixed areas of the sensors, the *accumulation regions*. Count how many
clusters land in each area per event. The mean count per event, after the
background from non-colliding bunches is subtracted, is proportional to the
number of visible pp interactions μ_vis. The fraction of events with *no*
cluster in a region gives μ_vis = −ln P(0) (zero counting, or "log0"), which
is insensitive to cluster merging at high occupancy.

This RTL is the accumulator side of that scheme. One instance serves one VELO
layer: 8 regions, one per sensor. Regions 0–3 are the inner ones, close to
the beam. Regions 4–7 are the outer ones. For every event the instance:

1. decodes the cluster stream and the TFC word (bunch-crossing type and
   identifier, BXID);
2. counts the clusters inside each region;
3. feeds the counts to two independent sets of counters:
   * **running-mean counters** per bunch-crossing type (bb, be, eb, ee):
     cluster sums for all 8 regions, empty-event sums for the 4 outer
     regions, and event counts. These are averaged over windows of 1024 LHC
     orbits and folded into an exponential running mean with λ = 0.875;
   * **per-BXID counters**, kept in block RAM: for each of the 3564 BXIDs
     and each outer region, the number of empty events, plus the number of
     events with that BXID. These are integrated over 40 s.

A slow-control port returns all of these as 32-bit words. It also restarts
the per-BXID window. Twenty-six instances give the detector's 208 average
counters, 104 log0 counters and 104 per-BXID counters. The control system
does the rest in software: background subtraction, logarithms, calibration,
and combining the counters (a trimmed mean). None of that is in this RTL.

```
 in_data[255:0] ─┐                         ┌─> average_counters ─────┐
 in_valid/soe/eoe├─> input_decoder ─> cluster_accumulator            ├─> slow_control_if ─> sc_rdata / sc_rvalid
 in_tfc[63:0]   ─┘   (beats, type,    (per-event counts)             │        ^ sc_rd / sc_wr / sc_addr
                      BXID, orbit)         └─> perbx_counters ─ sdp_ram ┘
```

## Input stream and event framing

Clusters arrive as 256-bit beats, eight 32-bit cluster words per beat. A beat
is taken when `in_valid` is high. `in_soe` marks an event's first beat and
`in_eoe` its last; both are set on a one-beat event. The 64-bit TFC word is
sampled on the SOE beat. There is no back-pressure, so every block takes one
beat per clock.

The bit layouts of the cluster word and of the TFC word belong to the readout,
not to this design. Both are chosen in `lumi_pkg` and are easy to change there:

| field | bits | notes |
|---|---|---|
| cluster valid | [31] | empty slots in a beat have it low |
| flags | [30:27] | carried, not used |
| sensor | [26:24] | 0–7 within the layer |
| column centroid | [23:11] | 10 integer + 3 fractional pixel bits |
| row centroid | [10:0] | 8 integer + 3 fractional pixel bits |
| TFC BXID | [11:0] | 0–3563 |
| TFC bunch-crossing type | [13:12] | 0 ee, 1 be, 2 eb, 3 bb |

A beat outside an event is dropped. An SOE inside an open event abandons the
open event, whose counts are then discarded. Either case sets the sticky
`framing_error` output.

## Orbits are the clock of all windows

Both integration windows are measured in LHC orbits, not in events or clock
cycles. The decoder flags an event as `new_orbit` when its BXID is not larger
than the previous event's BXID. The first event after reset is never flagged.
Counting in both blocks starts at the first orbit boundary after reset (or
after a restart), so no window is partial.

Counting orbits is what gives the intended window of N = 1024 × N_bb events
without knowing the filling scheme. Each orbit contains every colliding bunch
once, so 1024 orbits always hold 1024 × N_bb bb events. That is 2.18 × 10^6
events with 2133 colliding bunches, and 91.2 ms at 89.08 µs per orbit. For the
per-BXID window, 449000 orbits is 40.0 s.

The scheme relies on BXIDs rising within an orbit, as they do on the readout
links. If events reached this block out of BXID order, spurious boundaries
would be seen.

## Region selection (`cluster_accumulator`)

A region is a rectangle on one sensor: `{sensor, col_lo, col_hi, row_lo,
row_hi}`, in integer pixels, inclusive. A cluster is counted when it is
valid, its sensor matches, and the integer part of its centroid lies inside
the rectangle. All 8 × 8 cluster-to-region comparisons are made in parallel
on every beat. A population count per region is added to that region's
running count for the event. The counts are 16 bits and saturate.

One clock after the EOE beat, `ev_valid` pulses with the event's type, BXID,
orbit flag and eight counts. The default boxes in `DEFAULT_REGIONS` are
placeholders with a sensible size, 144 × 48 pixels. The inner boxes sit near
the beam edge of their sensors and the outer boxes farther out. Real boxes
must come from the detector geometry and are passed in through the `REGIONS`
parameter. The paper that introduced the scheme places the inner regions at
about 14 mm from the beam and the outer regions at about 26 mm.

## Running means (`average_counters`)

For each type k and region i, a window sums:

* `c[k][i]`, the clusters in region i;
* `z[k][o]`, the events with zero clusters in outer region o;
* `n[k]`, the events of type k.

The event count `n[k]` is an addition of this design. The background-
subtracted estimate divides each sum by the number of events of its type, and
here the hardware supplies that number with the same windowing.

When the window closes, every sum x updates its mean:

    m ← m + (x·2^8 − m) >>> 3         (arithmetic shift, floor)

This is m_t = λ·m_{t−1} + (1−λ)·x_t with λ = 7/8, kept with 8 fractional
bits. No multiplier is needed. The first complete window after reset loads
the means directly instead of blending them with zero. That is a choice of
this design. Without it, the means would need 17 windows to come within 10%
of their final value.

A window closes on the first event after its 1024th orbit. That event already
belongs to the next window. All 52 means change together one clock later,
`update` pulses, and `n_updates` counts. Sums are 32 bits and saturate. The
means are 40 bits wide. `LAMBDA_SHIFT` sets λ = 1 − 2^−LAMBDA_SHIFT, so only
λ values of that form are possible. The published firmware computes the
running mean in DSP blocks, which allows any λ. For λ = 0.875 a subtraction
and a shift give the same result without a multiplier, so this version uses
no DSP blocks.

## Per-BXID counters (`perbx_counters`, `sdp_ram`)

One RAM word per BXID holds five 20-bit lanes:

| lane | bits | content |
|---|---|---|
| 0–3 | [20o+19 : 20o] | events of this BXID with no cluster in outer region o |
| 4 | [99:80] | events of this BXID (M_j) |

Twenty bits are enough because only empty events are counted, not clusters.
Each BXID occurs at most once per orbit, so no lane can exceed the window
length of 449000 orbits, which is below 2^20. An assertion checks this bound
at elaboration. With cluster sums per BXID this guarantee would not hold.

Each event summary starts a two-stage read-modify-write. The BXID addresses
the RAM read on the clock the summary arrives. On the next clock, lanes are
incremented and written back. Two consecutive events with the same BXID (for
example an orbit with a single event) would read a stale word, because the
write of the first has not landed yet. The second event therefore takes the
word just computed from a forwarding register, which sustains one event per
clock. The RAM is simple dual-port and read-first, with a registered output.
It has no reset and maps to block RAM, about 21 M20K blocks on an Arria 10.

The window controller has four states, readable over slow control:

| state | code | behaviour |
|---|---|---|
| CLEAR | 0 | writes zero to all 3564 words, one per clock |
| WAIT | 1 | waits for the first event of a new orbit |
| RUN | 2 | counts; leaves after `WINDOW_ORBITS` boundaries |
| DONE | 3 | frozen until the control system has read it |

Reset and the restart command both enter CLEAR. The freeze-and-restart
protocol is a choice of this design. A double-buffered RAM would avoid the
dead time but doubles the memory.

A read request waits until the RAM read port is free. The read port is busy
on clocks that carry an event. The answer comes one clock after the read is
issued, so two clocks after the request when the port is idle. Under a
continuous event stream a read can wait indefinitely. Any clock without an
event frees the port, for example a crossing that is not read out. Reads are
therefore best made in DONE, when no counting takes place.

## Slow-control port (`slow_control_if`)

Each access is a one-clock `sc_rd` or `sc_wr` with a 16-bit word address. A
read answers with `sc_rvalid` and the 32-bit `sc_rdata`. Register reads
answer on the next clock. Per-BXID reads answer after the RAM read, and
`sc_busy` stays high until then; no read may be issued while `sc_busy` is
high, which an assertion checks.

| address | content |
|---|---|
| `0x0000 + k·8 + i` | mean cluster count, type k, region i (integer part) |
| `0x0100 + k·4 + o` | mean empty-event count, type k, outer region o |
| `0x0200 + k` | mean event count, type k |
| `0x0300` | number of running-mean updates |
| `0x0301` | per-BXID state |
| `0x0302` | orbits counted in the per-BXID window |
| `0x0310` write, bit 0 | clear and restart the per-BXID window |
| `0x8000 + j·8 + l` | per-BXID word of BXID j, lane l (l = 5–7 read 0) |

Type k is 0 = ee, 1 = be, 2 = eb, 3 = bb. Means are returned without their
fractional bits. Unmapped addresses read as zero.

Software forms, per region:

* the average estimate: c_bb/n_bb − c_be/n_be − c_eb/n_eb + c_ee/n_ee;
* the log0 estimate: −[ln(z_bb/n_bb) − ln(z_be/n_be) − ln(z_eb/n_eb) + ln(z_ee/n_ee)];
* per BXID: −ln(z_j/M_j).

## Where this departs from, or adds to, the published scheme

Taken from the published description:

* 3564 BXIDs;
* 256-bit cluster data with Data Valid, SOE and EOE framing;
* the 64-bit TFC word;
* four bunch-crossing types;
* four inner and four outer regions per layer, 26 layers;
* average counters for all regions;
* log0 and per-BXID counters only for the outer regions;
* windows of 1024 × N_bb events, λ = 0.875;
* 20-bit per-BXID RAM words;
* a window of about 40 s;
* a 32-bit output register with a valid strobe.

Choices of this design:

* the cluster and TFC bit layouts;
* rectangular regions and their default coordinates;
* orbit detection from the BXID sequence;
* the event counts `n[k]` and `M_j`;
* loading the first window directly;
* saturation everywhere;
* the freeze-and-restart per-BXID protocol;
* packing five lanes in one RAM word;
* the bus handshake and the address map;
* a shift instead of a multiplier for λ.

The published firmware may differ in any of these.

Not included:

* the clustering itself, which feeds `in_data`;
* the TFC system;
* the readout board;
* the control-system software.

Regions and window lengths are fixed at build time, as in the published
firmware, where a rebuild is needed to change them. Registers that set them
at run time were proposed there as a possible extension and are not built.

## Simulation

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=… failures=…`:

| testbench | what it covers |
|---|---|
| `tb_input_decoder` | framing, TFC decoding, orbit flags, error cases |
| `tb_cluster_accumulator` | region tests against an independent model, timing, saturation (3-bit instance) |
| `tb_average_counters` | all 52 means against a model at 4-orbit windows, update timing, saturation (7-bit sums) |
| `tb_sdp_ram` | default size, read-first collisions |
| `tb_perbx_counters` | 64 BXIDs and 20 orbits: forwarding, clear, restart, reads during streaming |
| `tb_slow_control_if` | address map, latencies, busy flag, restart |
| `tb_velo_lumi_counters` | whole design with short windows (4 and 12 orbits), multi-beat events |
| `tb_velo_lumi_full` | whole design at default parameters |
| `tb_velo_lumi_workloads` | default parameters, pp (2133 colliding bunches) and PbPb (508) filling schemes |

The two end-to-end benches share `lumi_e2e_tester`. It plays a filling scheme
with all four crossing types, keeps its own model of every counter, and reads
everything back over the slow-control port. It also counts each mechanism:
window updates, per-BXID window end, restart, framing error, empty-region
events and each crossing type. A mechanism that never occurred counts as a
failure.

`tb_velo_lumi_workloads` runs the default design under two filling schemes:
pp with 2133 colliding bunches per orbit and PbPb with 508. Each scheme adds
40 crossings of each non-colliding type and runs for two windows, with known
hit probabilities per region. The bb event count per window must read back
as exactly 1024 × N_bb (2184192 and 520192). The update period must be 1024
orbits. The background-subtracted average and log0 estimates, formed from the
read-back means the way the control software forms them, must recover the
generated rates to within 0.006. This takes about 7 s to simulate.

`tb_velo_lumi_full` runs the default design through one complete 449000-orbit
per-BXID window and more than 400 running-mean windows. It uses four
crossings per orbit to keep the run to a few million clocks, about 4 s of
simulation.

With plain Verilator, from the repository root:

```
verilator --binary --timing --assert -Irtl rtl/lumi_pkg.sv \
    $(ls rtl/*.sv | grep -v lumi_pkg) tb/lumi_e2e_tester.sv tb/tb_velo_lumi_full.sv --top-module tb_velo_lumi_full
./obj_dir/Vtb_velo_lumi_full
```

A block bench needs only the package, its module (plus `sdp_ram` for
`perbx_counters`) and the bench file. Verilator has only two signal states,
so everything that is read is reset or initialised. The RAM is the exception:
it is cleared by the CLEAR state instead.

In synthesis, one instance comes to about 4500 flip-flops and 356400 RAM bits.
The bits that synthesis reports as unused are deliberate:

* the flag bits of the cluster words;
* the upper TFC bits;
* `sc_wdata[31:1]`.
