# A Hough-transform Level-1 track finder (TMTT chain) in SystemVerilog

At the High-Luminosity LHC, the CMS outer tracker sends *stubs* to the Level-1
trigger for every bunch crossing, at 40 MHz. A stub is a pair of hits in the two
closely spaced sensors of one module, and its bend shows that it comes from a
particle above about 2 GeV of transverse momentum. From these stubs the trigger
must rebuild charged-particle tracks within about 4 µs. The time-multiplexed
track trigger (TMTT) splits the work two ways. In time, each processor receives
one whole event and has many bunch crossings to handle it; the demonstrator
used a multiplexing factor of 36. In space, each processor covers one ninth
(nonant) of the detector in azimuth φ.

This RTL implements one such track-finding processor. It follows the
architecture described in *"Level-1 Track Finding with an all-FPGA system at
CMS for the HL-LHC"* (CMS Tracker Group). The core idea is a **Hough
transform** in the r–φ plane. In the tracker's magnetic field, a track from the
beam line obeys, to first order,

    φ_track = φ_stub + r · q/pT

So each stub (r, φ) becomes a straight line in the track-parameter plane
(q/pT, φ_track). Stubs of one particle meet in a single point of that plane. The
plane is binned into 32 × 64 cells. A cell crossed by stubs from enough
different layers is a track candidate. A fitter then refines each candidate
from its stubs. Because cells are finite, one particle fires several
neighbouring cells. A simple per-track test keeps only the candidate whose
fitted parameters fall in its own cell.

The article also describes a second approach, the *Tracklet* road search. That
approach is not part of this RTL.

## Data flow

```
 nonant link 0 ──┐                    ┌─ HT ─ KF ─ DR ─▶ tracks, sub-region 0
 (stub stream)   │   Geometric        ├─ HT ─ KF ─ DR ─▶ tracks, sub-region 1
                 ├─▶ Processor ──────▶┤        ...
 nonant link 1 ──┘  (route, copy,     └─ HT ─ KF ─ DR ─▶ tracks, sub-region 35
 (stub stream)       reformat)          36 = 2 (φ) × 18 (η) parallel chains
```

| module | role |
|---|---|
| `tmtt_tfp` | top: GP plus 36 chains of HT → KF → DR |
| `geometric_processor` | routes each stub to the (φ, η) sub-regions it can belong to |
| `stub_fifo2w` | FIFO with two write ports and one read port, one per GP output |
| `ht_array` | 32 × 64 r–φ Hough transform for one sub-region |
| `kf_fitter` | stub-by-stub track fit of each candidate (r–φ and r–z) |
| `dup_removal` | keeps a track only if its fit lies in its own Hough cell |
| `tmtt_pkg` | number formats, stream types, geometry constants |

## Streams and events

All blocks talk through valid/ready streams of packed-struct *beats*
(`stub_beat_t`, `ht_beat_t`, `track_beat_t`). A beat moves when the producer
offers it and the consumer's `ready` is high in the same clock. An event has no
separate timing signal: its items are followed by one **end-of-event beat**
(`eoe`, or kind `HT_EOE`), and every block forwards that marker. So any block
can be paused by back-pressure without losing event boundaries. Each of the 36
outputs of `tmtt_tfp` produces one end-of-event beat per event, even when it
found no track.

## Number formats

The article gives no bit formats. The ones below are this design's own
(see `tmtt_pkg.sv`).

| field | width | unit |
|---|---|---|
| `r` | 12 bit unsigned | mm |
| `phi` | 14 bit signed | one φ sub-region (20°) = 4096 LSB; a nonant = 8192 LSB |
| `z` | 13 bit signed | mm |
| `layer` | 3 bit | layer identifier (8 layers) |
| `ps` | 1 bit | 1 = pixel-strip module, 0 = strip-strip module |

In the Hough transform, q/pT is measured in *column values*
qv = 2c − 31 for column c = 0…31. The bend r·q/pT becomes
`(r · qv · 7) >>> 6` φ-LSB (`QSCALE`/`QSHIFT`). With this scale the outermost
column, |qv| = 31, corresponds to pT ≈ 2 GeV at r = 1.1 m in a 3.8 T field. The
fitted qv has 4 fraction bits (`QV_FRAC`).

## Geometric Processor

The processing nonant spans φ = [−4096, 4096) LSB. It straddles two detector
nonants, and each of them arrives on its own link in its own φ origin.
`PHI_OFFSET0/1` (−4096/+4096) convert a link's φ to processing coordinates. A
stub is copied to every sub-region that a track within the Hough range could
pass through:

* **φ sub-region p** (p = 0: [−4096, 0), p = 1: [0, 4096)): the stub's φ must
  lie inside the sub-region, widened on both sides by the largest bend the
  Hough array can reach at the stub's radius, `(r·31·7)>>>6`.
* **η sub-region e**: a straight line from some z0 in ±150 mm through the
  stub must have cot θ = (z − z0)/r within `[ETA_BOUND[e], ETA_BOUND[e+1])`.
  The boundaries are 256·sinh(ηk) with ηk = −2.4 + k·4.8/18 (equal η steps).
  The comparison is done by multiplying, with no division:
  `(z+150)·256 ≥ B[e]·r` and `(z−150)·256 < B[e+1]·r`.

The copied stub has its φ re-expressed relative to the low edge of its φ
sub-region. That is what the HT expects.

Each output has a 16-entry FIFO that takes up to two writes per clock, one from
each link. A link is **stalled** (`in_ready` low) when any FIFO has fewer than
two free entries. A link is also held after its end-of-event beat until the
other link's end-of-event has arrived too. Then an end-of-event beat is written
into all 36 FIFOs, and both links resume. A stub accepted in clock *t* is
visible at the FIFO output in clock *t+1*. `n_dup` counts stubs copied more
than once, and `n_stall` counts clocks a link was held.

## Hough transform (`ht_array`)

This is the heart of the design and the part with the most detail.

**Filling.** A stub is absorbed every clock. For each of the 32 columns *in
parallel*, the stub's line is evaluated at the two column edges,
qv = 2c − 32 and 2c − 30:

    φa = φ + ((r·(2c−32)·7) >>> 6),   φb = φ + ((r·(2c−30)·7) >>> 6)

Every row between ⌊min/64⌋ and ⌊max/64⌋, clipped to 0…63, is marked.
Evaluating at both edges instead of the column centre matters. A line usually
crosses a row boundary inside a column, and a centre-only fill splits a
particle's stubs over two cells and loses it. Each cell holds an 8-bit
**layer mask**, and a stub sets the bit of its layer. A cell is a candidate
when its mask has at least `MIN_LAYERS` bits set. The default is 5; the
article says "4 or 5". Counting layers instead of stubs keeps two stubs of one
layer from making a candidate. The stub itself is also written into a stub
memory of `MAX_STUBS` (64) entries. Stubs beyond that are dropped
(**truncation**, counted in `n_trunc`).

**Read-out.** After the end-of-event beat, the array stops taking input
(`in_ready` low) and scans:

```
for column c = 0..31:
    LOAD  : pending ← candidate rows of column c      (1 clock)
    repeat: PICK lowest pending row p                  (1 clock)
            HDR : emit {HT_HDR, c, p}                  (1 clock + back-pressure)
            STUBS: replay the stub memory, one stub per clock; emit
                   {HT_STUB, stub} for each stub whose line crosses (c, p)
    PICK with nothing pending → next column
emit HT_EOE, then clear all cells in one clock, back to filling
```

The stubs of a candidate are found again by recomputing the same line test
during the replay, so the cells store only layer masks, not stub lists. In
clocks, an event of N stubs and K candidates costs about
N (fill) + 64 (scan) + Σ(N + 3) over the candidates (read-out) + 2,
plus any output back-pressure. A busy sub-region therefore takes longer (see
*Departures* below).

## Track fitter (`kf_fitter`)

For each candidate, the fit starts from the centre of its Hough cell,
φ0 = 64·p + 32 and qv = 2c − 31. The stubs then arrive one per clock. For each
stub the current estimate predicts

    φ_pred = φ0 − ((r · qv · 7) >>> (6 + 4))

A stub with |φ − φ_pred| > `GATE` (160 LSB) is **skipped** (`n_skipped`).
Otherwise it is added with weight `W_PS` = 2 for PS modules or `W_2S` = 1 for
2S modules. The state is five weighted sums, S1, Sx, Sxx, Sy and Sxy, with
x = −r and y = φ. From the second accepted stub on, the estimate is their
weighted least-squares solution:

    det = S1·Sxx − Sx²
    φ0  = (Sxx·Sy − Sx·Sxy) / det
    qv  = (S1·Sxy − Sx·Sy)·2^10 / (7·det)

Both are rounded to nearest. For a static straight-line model with no process
noise, this is what a Kalman filter converges to after the same stubs. The
running sums stand in for the filter's state vector and covariance, at the cost
of one division per update. The header or end-of-event beat that follows a
candidate closes it. The track is emitted in that clock if at least `MIN_FIT`
(4) stubs were accepted; otherwise it is dropped (`n_rejected`).

The same accepted stubs also feed a second straight-line fit, in the r–z plane:
z = z0 + r·cot θ. It has its own five sums (U1, Ur, Urr, Uz, Urz). The weights
are `WZ_PS` = 64 and `WZ_2S` = 1, because a PS module's pixel gives z to about
a millimetre while a 2S strip is centimetres long. The r–z fit gates nothing.
It is solved once, when the track closes, and gives z0 in mm and cot θ with 8
fraction bits. η follows from cot θ as asinh(cot θ).

## Duplicate removal (`dup_removal`)

A fitted track is kept only if its fitted parameters fall in the cell that
produced it: column ⌊(qv + 32)/2⌋ and row ⌊φ0/64⌋. A particle that fired three
neighbouring cells gives three nearly identical fits, and only the cell that
contains the fit keeps its copy. No pairs of tracks are compared. The output is
registered, with one clock of latency.

## Latency and throughput

With no back-pressure, the GP adds 1 clock, the fitter 1 clock after a
candidate's last stub, and duplicate removal 1 clock. The rest is the Hough
fill and read-out described above. In the end-to-end test, the first track
leaves 70–130 clocks after the first stub enters, depending on the random
event. The article quotes its demonstrator latencies in ns (GP 251 ns,
HT 1025 ns, KF+DR 1658 ns, 3538 ns from first stub in to first track out). It
gives no clock frequency for this chain, so those figures are not compared
cycle by cycle here.

## What follows the article and what does not

From the article:
* the four-step chain GP → HT → fit → duplicate removal;
* two adjacent nonants into one GP, and 2 × 18 sub-regions with stubs copied
  across boundaries;
* the line equation, the 32 × 64 array, and the 4-or-5-stub threshold;
* a fit that starts from the HT cell, adds stubs one by one weighted by their
  uncertainty, and skips inconsistent stubs;
* duplicate removal by checking the fit against the candidate's own cell.

This design's own choices:
* all number formats, the q/pT scale and the η boundaries;
* the stream protocol with end-of-event beats;
* FIFO sizes, the stub-memory size and truncation;
* counting layers rather than stubs, and filling at both column edges;
* the serial candidate read-out;
* the least-squares form of the fit, with its weights, gate and minimum
  stub count, and the separate r–z line fit.

**Departures to be aware of:**
* The article's chain has a *fixed* latency whatever the occupancy. Here the
  Hough read-out is serial, so latency and dead time grow with the number of
  candidates. Each `ht_array` also holds only one event: its input stalls
  during read-out, and the stall propagates back to the GP links.
* The demonstrator brings each nonant in on 36 optical links. Here each nonant
  has one stub per clock. A PU-200 event (on the order of 1,700 stubs per
  nonant) therefore needs far more than one time-multiplexed period to load.
  The logic is right, but the input bandwidth is not the demonstrator's.
* The 36 track outputs are not merged onto output links. Duplicate removal
  acts inside one sub-region only. A track whose stubs were copied into two
  neighbouring η sub-regions is therefore usually output twice, once from
  each sub-region.
* Inter-board optical links, SERDES, source and sink boards, and board control
  are not modelled. The blocks are connected directly.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_geometric_processor`: random stubs on both links over 4 events, with
  random output back-pressure. A real-number reference (using `$sinh` for the
  η boundaries) predicts every sub-region copy and its φ. Each output is checked
  stub by stub and event by event. The test also checks the duplication
  counter and that stalls occur.
* `tb_ht_array`: simulated tracks plus noise, including one event that
  overflows the stub memory. An independent reference fills its own array and
  predicts the exact output beat sequence: headers in scan order, each with its
  stubs. The test checks the sequence, the truncation and candidate counts, and
  the input stall.
* `tb_kf_fitter`: candidates built from tracks with small φ noise, some with a
  far-off extra stub that must be skipped, and some too short to be kept.
  Stubs carry z with PS-like or 2S-like smearing. φ0, qv, z0 and cot θ must
  each match a real-number weighted least-squares fit within 1 LSB. The track
  must appear in the clock after its last stub.
* `tb_dup_removal`: tracks placed in, next to, and outside their cells. The
  keep/remove decisions, the order, the 1-clock latency and the counters are
  checked.
* `tb_tmtt_tfp`: runs the whole processor at its default size. It sends two
  ordinary events of 6 particles plus 20 noise stubs each, and a crowded event.
  Every particle of the ordinary events must come out with φ0 within 12 LSB
  and qv within 0.6 of the truth. For a track fitted from exactly the
  particle's six stubs, z0 must be within 3 mm and cot θ within 0.02. Every
  output must close every event. Each
  mechanism must occur at least once: GP copying and stall, HT truncation,
  fitter skip and reject, and duplicate removal.

* `tb_single_muon`: the single-muon workload, at the default size. It sends
  40 events of one muon each, back to back, across the whole nonant. Every
  muon must be found with φ0, qv, z0 and cot θ within the tolerances above,
  and no track may fail to match its event's muon. Typical result: 40 of 40
  found. Nearly every muon comes out twice, because the beam-spot margin puts
  its stubs into two neighbouring η sub-regions and duplicate removal only
  looks inside one Hough array. The first track of an isolated event appears
  55–90 clocks after its first stub. Back-to-back events queue behind the
  Hough read-out, so later events reach about 430 clocks.

To run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_tmtt_tfp \
    -y rtl -y tb +libext+.sv rtl/tmtt_pkg.sv tb/tb_tmtt_tfp.sv
./obj_dir/Vtb_tmtt_tfp
```

Swap in another testbench name to run it instead. `tb_tmtt_tfp` accepts
`+trace` to print every output track. The full processor takes about half a
minute to build and under a second to run.

## Changing the design

* Threshold and sizes: set `MIN_LAYERS`, `MAX_STUBS` and `FIFO_DEPTH` on
  `tmtt_tfp`, and `GATE`, `W_PS`, `W_2S` and `MIN_FIT` on `kf_fitter`.
* Array size, q/pT scale, sub-region counts and η boundaries live in
  `tmtt_pkg`. If you change `HT_NQ` or `HT_NPHI`, keep `SUBREG_PHI_W` and
  `PBIN_SHIFT` consistent.
* The Hough cells are plain flip-flops: 32 × 64 × 8 bits per sub-region. A
  technology-specific implementation would map them to distributed RAM.
