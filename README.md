# Global Reconstruction Logic (GRL) of the Belle II level-1 trigger — RTL

The Belle II level-1 trigger must decide, within 4.4 µs and without dead
time, whether a SuperKEKB bunch crossing is worth reading out. Four
sub-trigger systems look at single detectors: the drift-chamber (CDC)
trigger finds tracks, the calorimeter (ECL) trigger finds clusters, the TOP
and KLM triggers report which azimuthal segments were hit. The Global
Decision Logic (GDL) finally combines simple yes/no "input bits" with AND,
OR and NOT into the trigger menu.

Between them sits the GRL. It is the one place that sees the detailed
objects of all four systems at once, so it can *count* tracks per
collision, *compare* objects from different detectors in azimuth, and
*recognise topologies* (back-to-back pairs, wide opening angles, short
tracks that stop in the endcap). Its output is a short vector of bits and
small counts, sent to the GDL every 7.8 ns.

This repository gives synthesizable SystemVerilog for that reconstruction
logic, following the published description of the GRL firmware ("Design of
the Global Reconstruction Logic in the Belle II Level-1 Trigger system",
Lai, Koga, Iwasaki et al.). The description explains the algorithms but
not every width, encoding and table; where it is silent this RTL makes its
own choice, and the sections below say which is which.

## Clocks and data rates

Everything runs on the 127.216 MHz trigger system clock (7.8 ns). The
different inputs refresh at different rates:

| source | refresh | what arrives (as decoded here) |
|---|---|---|
| CDC 2D trackers, 4 quadrants | every 4th clock (31.8 MHz "data clock") | up to 4 tracks per tracker: omega (-33..33, ∝ charge/pt), phi (0..82, 1.125° units, local to the quadrant) |
| CDC track-segment finders SL0..SL4 | data clock | one hit bit per track segment: 160, 160, 192, 224, 256 segments |
| ECL trigger | every 16th clock | up to 6 clusters: theta (7 bit), phi (8 bit), energy (12 bit), 1.40625° units |
| TOP trigger | every clock | 16 stave hit bits |
| KLM trigger | every clock | 8 barrel-octant hit bits, 8 endcap-sector hit bits |

The data clock is not a separate clock here: `cdc_flow_ctrl` produces
`dclk_en`, high on one system clock in four, aligned so that the first
system clock after each revolution pulse (every 10 µs) carries it. All CDC
inputs are sampled in `dclk_en` cycles.

The serial links themselves (8B/10B and 64B/66B, 5.1–5.6 Gb/s, on FPGA
transceivers) are not part of this RTL; the top level takes the already
decoded words. The 3D and neural-network tracker links take part in the
start-up handshake, but no GRL condition on their z0/theta output is
defined, so their data do not enter the RTL.

## Start-up: flow control of the CDC trigger chain

The CDC trigger is a deep network (front-end boards → mergers → segment
finders → trackers → GRL), and every front-end board has to restart its
time stamp on the same revolution. The GRL, at the end of the chain,
coordinates this (`cdc_flow_ctrl`):

1. `WAIT_READY`: wait until all 17 upstream CDC modules have a stable link
   (`link_ok`) and report ready (`ready_up`). Each of them only reports
   ready when its own upstream modules are ready.
2. `WAIT_REV`: wait for the next revolution pulse.
3. `RUN`: hold `fc_out` high; upstream modules forward it, and the
   front-end boards all restart on the following revolution.

Losing any link or ready sends the controller back to `WAIT_READY` (this
fall-back is a choice of this RTL). The controller also keeps a 13-bit
data-clock time stamp 0..319 since the last revolution, for monitoring.

## Counting tracks per event

This is the core of the track trigger and the least obvious part.

Tracks of one collision do not arrive together: the drift time of the
chamber spreads them over about 500 ns, i.e. 16 data clocks. The GRL
therefore keeps a **16-deep shift register** of "number of new tracks in
this data clock" and its running **sum** — the number of tracks seen in
the last 500 ns. While an event's tracks arrive the sum rises; 16 data
clocks after the first track it starts to fall. At the **first decrease**
the value just before it is the maximum, and that is reported as the
track count of the event (`n_trk`, with a one-clock strobe `n_trk_stb`).

Example (numbers in data clocks): one new track at 4, two at 10, one at
14. The sum reads 0, 1 (from 5), 3 (from 11), 4 (from 15), 3 (from 21),
1 (from 27), 0 (from 31). At 21 the first decrease reports **4**. The
later decrease 3→1 reports nothing: the detector is re-armed only by a
rise. `tb_track_counter` replays exactly this sequence.

Implementation (`track_counter`): the sum is updated incrementally
(`sum + entering − leaving`), `sum_prev` keeps the previous value, an
`armed` flag is set by a rise and cleared by a fall. `fall` and
`n_event` are decoded from registers and last one system clock.

**Duplicate removal** (`track_dedup`). Cross-talk in the front-end
electronics makes the 2D trackers report bundles of nearly identical fake
tracks. Before counting, the 16 tracks of a data clock are compared
pairwise; two tracks with |Δomega| < 8 and |Δphi| < 8 units (9°) are the
same track. Track *j* is counted only if no valid track with a lower index
is that close. (Note the effect on chains: if A~B and B~C, C is dropped
even when it is not close to A.) Duplicates are only looked for within one
data clock; pairs a few data clocks apart are both counted. Removal can be
switched off with register 0x01.

**Global azimuth.** Trackers give phi relative to their quadrant,
0..82 units of 1.125° (slightly more than 90°, so quadrants overlap). This
RTL uses `global = (80·quadrant + local) mod 320`.

## Track geometry bits

Every valid track sets one bit of a **36-bit array** (10° per bit,
`bin = floor(9·phi/80)`), held for 16 data clocks (`phi_hit_array`, one
down-counter per bit). On that array `topo_cond` tests "bit *i* set and
at least one of bits *i+LO … i+HI* (mod 36) set":

| condition | LO..HI | meaning |
|---|---|---|
| back-to-back | 16..20 | partner within 160°–200° |
| opening angle > 90° | 9..27 | partner 90°–270° away |
| opening angle > 30° | 3..33 | any partner at least 30° away |

The > 30° condition targets two close charged particles (e.g. a dark
Higgs decaying to two tracks); the other two serve hadronic, Bhabha,
µµ and ττ triggers.

## Short tracks

Tracks leaving through the endcap, or curling inside the chamber, cross
fewer than nine super-layers and are never reported by the 2D trackers.
`short_tracking` finds them directly from track-segment hits of SL0–SL4:

* **Mesh.** The five super-layers have 160…256 segments; their greatest
  common factor, 64, gives a common mesh of 5.625°. Segment *i* of an SL
  with *N* segments goes to bin `floor(64·i/N)`.
* **Veto.** Segments already used by a full track are not entered. How
  the association is determined is not described, so it comes in from
  outside as a 5×64 mask (`ts_assoc`).
* **Hold.** Each mesh bit stays on for 16 data clocks.
* **Patterns.** For every SL0 bin *b* and every pattern (d1, d2, d3, d4),
  a short track is found if bins *b+d1* of SL1, *b+d2* of SL2, *b+d3* of
  SL3 and *b+d4* of SL4 are set. The original firmware uses 130 patterns
  derived for tracks from the interaction point, which are not published.
  **The default table here is this RTL's own**: same-sign offsets of
  non-decreasing magnitude, first offset 0..2, each further step 0..2,
  |d4| ≤ 5 — 131 patterns. It is a parameter (`PATTERNS`, 16 bits per
  pattern, `{d4,d3,d2,d1}` as 4-bit two's complement) and can be replaced
  by a real table.
* **Outputs.** `st64` (SL0 bins with a short track), the count `n_st`
  (number of such bins, so a track that matches in two neighbouring bins
  counts twice), and back-to-back / > 90° / > 30° conditions between full
  and short tracks and among short tracks, after mapping SL0 bins to the
  36-bin scale (`floor(9·b/16)`).

The pattern matcher is 64 × 131 five-input ANDs, written as generate
loops.

## Matching tracks with outer detectors

A 2D track is a circle through the interaction point. At radius *R* its
azimuth has turned by Δφ = asin(R / 2r) from the initial direction, with
r the bending radius. Since pt = 10.2/|omega| GeV = 0.0044·r[cm], this is
Δφ = asin(K·|omega|) with K = R·0.0044/(2·10.2). The published K for the
barrel calorimeter is 0.0278 (R ≈ 129 cm). (The description writes the
formula as asin(r/2R) in one place and asin(0.0278·omega) in another; only
the latter is consistent with the geometry, and it is the one used.)

`phi_extrap` looks up Δφ in a 64-entry table computed at elaboration (a
fixed-point sine series and a search, rounded to the nearest 1.125° unit)
and returns φ_ex = φ ± Δφ; the sign follows the sign of omega (the
polarity is this RTL's choice). If K·|omega| ≥ 1 the track curls up before
reaching R and sets nothing.

Tracks reach the GRL about 1 µs before clusters of the same collision.
So each extrapolated bin is set in a 36-bit array and **held for a
programmable number of system clocks** (default 200 ≈ 1.56 µs, registers
0x02–0x04).

* **ECL** (`ecl_match`): at each cluster frame, a cluster in the barrel
  (35° < θ < 126°) matches if its bin or either neighbour is set. Outputs:
  `ecl_match` and the number of matched clusters.
* **TOP and KLM barrel** (`seg_match`): same scheme with their own table,
  hold time and criterion. The radii and criteria are not published; this
  RTL uses R = 120 cm (K = 0.0259) for TOP and 201 cm (K = 0.0434) for
  KLM, segments of 22.5° (TOP) and 45° (KLM) starting at φ = 0, and a
  match when a hit segment overlaps a set bin (`MARGIN` widens this).

## Other bits

`other_bits` adds, with the same bin-range test:

* track–cluster back-to-back (extrapolated track vs cluster) and
  cluster–cluster back-to-back;
* a cluster in the same azimuthal hemisphere as a track (offset −8..+8
  bins) or in the opposite one (9..27) — the exact hemisphere rule is this
  RTL's;
* `klm_ec_cdc`: for the muon trigger in the endcaps, a coincidence of
  held segment hits in SL0, SL1 **and** SL2 within a 90° sector with a hit
  in the matching forward or backward endcap KLM sector. The sector layout
  (4 per endcap, forward bits 0–3) is this RTL's.

## Slow-control registers

`grl_regs` sits behind a simple synchronous bus (on the board it is
reached over VME, whose protocol is not modelled). Write: `wr` with
`addr`/`wdata`. Read: `rd`, data on `rdata` one clock later.

| addr | access | content | reset |
|---|---|---|---|
| 0x00 | R | identifier 0x47524C01 | |
| 0x01 | RW | bit 0: duplicate removal enable | 1 |
| 0x02 | RW | φ_ex hold, ECL (system clocks, 10 bit) | 200 |
| 0x03 | RW | φ_ex hold, TOP | 200 |
| 0x04 | RW | φ_ex hold, KLM | 200 |
| 0x05 | RW | extra GDL output delay, 0..15 | 0 |
| 0x06 | W | link reset: `link_reset = wdata` for one clock | |
| 0x07 | R | link status | |
| 0x08 | R | [1:0] flow-control state, [2] all ready, [28:16] time stamp | |
| 0x09 | W | clear rate counters | |
| 0x40+i | R | rising edges of monitored bit *i* since clear | 0 |

Monitored bits, index 17 down to 0: `n_trk_stb, trk_b2b, trk_oa90,
trk_oa30, fs_b2b, fs_oa90, fs_oa30, ss_b2b, ss_oa90, ss_oa30, ecl_match,
top_match, klm_match, tc_b2b, cc_b2b, tc_same, tc_opp, klm_ec_cdc`.

## Output to the GDL

`gdl_out` delays the bit vector by 0..15 clocks (register 0x05, for
timing alignment at the GDL), registers it, and presents it twice: as
parallel lines (`gdl_lvds`, the path used for latency-critical bits) and
in the low bits of the 168-bit word sent each clock (`gdl_frame`, rest
zero). The 29 bits, from MSB (`grl_pkg::grl_bits_t`):

`n_trk_stb, n_trk[3:0], trk_b2b, trk_oa90, trk_oa30, n_st[3:0], fs_b2b,
fs_oa90, fs_oa30, ss_b2b, ss_oa90, ss_oa30, n_ecl_match[2:0], ecl_match,
top_match, klm_match, tc_b2b, cc_b2b, tc_same, tc_opp, klm_ec_cdc`.

The bit selection and order are this RTL's; the published description
does not list the GRL input bits.

**Latency.** From the system clock that samples a CDC frame to the track
count at `gdl_lvds`: 66 clocks with delay 0 (64 for the 16-data-clock
window, one for the falling-edge decode, one output register), checked in
`tb_grl_top`. Geometry and short-track bits appear 2–3 clocks after the
frame; matching bits 2–3 clocks after the cluster frame or hit.

## Files

| file | block |
|---|---|
| `rtl/grl_pkg.sv` | shared constants, structs (`trk2d_t`, `trk_t`, `ecl_clus_t`, `grl_bits_t`), helpers |
| `rtl/grl_top.sv` | the GRL, wiring of everything below |
| `rtl/cdc_flow_ctrl.sv` | start-up flow control, data-clock enable, time stamp |
| `rtl/track_summary.sv` | global phi, duplicate removal, counting, track geometry |
| `rtl/track_dedup.sv`, `rtl/track_counter.sv` | duplicate flags; per-event count |
| `rtl/phi_hit_array.sv`, `rtl/topo_cond.sv` | held bit arrays; bin-range conditions |
| `rtl/short_tracking.sv` | mesh, veto, pattern matching, short-track bits |
| `rtl/phi_extrap.sv` | Δφ table and extrapolated bin |
| `rtl/ecl_match.sv`, `rtl/seg_match.sv` | ECL matching; TOP/KLM matching |
| `rtl/other_bits.sv` | cluster topology, endcap KLM coincidence |
| `rtl/grl_regs.sv`, `rtl/gdl_out.sv` | registers; output stage |

Every block has a self-checking testbench `tb/tb_<block>.sv` whose
expected values come from an independent model inside the testbench
(for example the real-valued `$asin` for the extrapolation, or an
explicitly enumerated pattern list). Each prints
`TB_RESULT checks=N failures=M`. `tb/tb_grl_top.sv` runs the whole GRL at
its default sizes: start-up, two collision events (with duplicate
removal on, then off with a 5-clock output delay), short tracks,
ECL/TOP/KLM matching, a late cluster after the hold time has expired, and
a rate-counter read-back; it counts each of these mechanisms and fails if
one never happened.

## Simulating

With Verilator 5:

```
verilator --binary --timing -Wno-fatal -y rtl rtl/grl_pkg.sv \
    tb/tb_grl_top.sv --top-module tb_grl_top -o sim
./obj_dir/sim
```

Replace `tb_grl_top` by any other testbench name. `-y rtl` lets Verilator
find each module in `rtl/<module>.sv`; the package must be listed first.
The testbenches use only `$urandom` for stimulus and run in seconds.

## Changing it

* Sizes that follow the detector (segments per SL, number of clusters,
  segments of TOP/KLM, tracks per tracker) are constants in `grl_pkg`.
* The short-track pattern table is the `PATTERNS` / `NPAT` parameter of
  `short_tracking`.
* Extrapolation radii are the `KCOEF` parameters (K × 10⁴) on the
  `ecl_match` and `seg_match` instances in `grl_top`.
* Hold times and the output delay are run-time registers.

## How far to trust it

Taken from the published description: the data rates and widths listed
above (except the ECL phi width), the flow-control sequence, the 16-deep
counting window and falling-edge rule, the duplicate thresholds, the
36-bin array and the three geometry ranges, the 5×64 short-track mesh and
its hold time, the extrapolation formula with K = 0.0278, the barrel cut
and ±1-bin ECL criterion, and the list of other bits.

Choices of this RTL, which a user of the real firmware should expect to
differ: the global-phi convention; duplicate search limited to one data
clock; the short-track pattern table; the segment-to-track association
input; the charge sign of the extrapolation; TOP/KLM radii, segment
origin and criteria; the default hold time (200 clocks, chosen from the
≈1 µs track-to-cluster arrival difference); the hemisphere and endcap-KLM
rules; the register map; the output bit list and order; the 8-bit ECL phi
field (the description gives 7 bits but a 0–360° range at 1.40625°, which
needs 8).

Not included: the serial link protocol and transceivers, LVDS drivers,
the VME bus protocol, and any use of 3D/neural-network z0 and theta.
