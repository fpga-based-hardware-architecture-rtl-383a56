# Contrast-maximisation tracker in SystemVerilog

An event camera does not deliver frames. Each pixel reports on its own when
its brightness changes, as an event `(t, x, y, p)`. An object that moves at
velocity `(vx, vy)` leaves a smeared trail of events. Shift every event back
to one common instant along the right velocity and the trail collapses into
a sharp image of the object's edges. Shift it along the wrong velocity and
the image stays blurred. **Contrast maximisation** (CM) turns this into an
optimisation. It finds the velocity for which the image of warped events
(IWE) has the largest variance.

This RTL runs CM in hardware for a simple object tracker. A square region of
interest (ROI, 64×64 pixels by default) follows the object. For each batch
of events the design:

1. keeps the events that fall inside the ROI and finds the batch's middle
   time `t_ref`;
2. runs a fixed number of gradient-ascent iterations (100 by default) on
   `(vx, vy)`, replaying the stored events in each one;
3. moves the ROI by the final velocity and reports it.

One event is processed per clock cycle, and four pixels are read per cycle
when the gradient is formed. With the default sizes, a batch of 5000 events
with 800 inside the ROI takes about 190,000 cycles. That is 0.90 ms at
210 MHz.

## The mathematics the hardware evaluates

Take one batch of events with timestamps between `t1` and `tN`.

* **Reference time and dt.** `t_ref = t1 + (tN - t1)/2`. For each event,
  `dt = t_k - t_ref` is scaled by `1/((tN - t1)/2)` so that it lies in
  `[-1, 1]`. Velocities are therefore in *pixels per half batch*.
* **Warp.** `x' = x - dt·vx` and `y' = y - dt·vy`. These positions are
  relative to the ROI corner.
* **Bilinear voting.** Split `x' = i + dx` and `y' = j + dy`. The event adds
  `(1-dx)(1-dy)`, `dx(1-dy)`, `(1-dx)dy` and `dx·dy` to pixels `(i,j)`,
  `(i+1,j)`, `(i,j+1)` and `(i+1,j+1)`. Summed over all events this gives
  the IWE `Iw`.
* **Derivative images.** The voting weights are differentiated along the
  chain `dx ← x' ← vx`, with `∂x'/∂vx = -dt`. So the same event also adds
  `-dt·∂w/∂dx` to a second image `Gx = ∂Iw/∂vx`. Per pixel that is
  `+(1-dy)dt`, `-(1-dy)dt`, `+dy·dt` and `-dy·dt`. A third image `Gy` is
  built the same way from `∂w/∂dy`.
* **Objective and gradient.** `C = Var(Iw)` over the `Np` ROI pixels. Its
  gradient is
  `dC/dvx = 2/Np · Σ (Iw - mean Iw)(Gx - mean Gx)`, and the same with `Gy`
  for `vy`.
* **Update.** `v ← v + η·∇C`. After the last iteration the ROI corner
  moves by `v`.

## Dataflow

```
 event stream ──► roi_filter ──► event buffer (bram_sdp, EV_DEPTH x 48)
        │                              │
        └──► ref_time_calc             ▼   (replayed every iteration)
               t_ref, 1/half ──► event_reader ──► event_warp ──► bilinear_vote
                                                     ▲                 │ 4 lanes
                                                     │                 ▼
                                   (vx, vy)   12 × pixel_accumulator (IWE, Gx, Gy × 4 parity banks)
                                      │                                 │ read + clear, 4 px/cycle
                                  flow_update ◄──── gradient_calc ◄─────┘
                                      │
                                  roi_update ──► ROI corner back to roi_filter
```

`cm_controller` sequences one batch. Its phases are COLLECT, REF, then
ITERS × (STREAM, DRAIN, GRAD, FLOW), then ROI. `cm_top` wires everything
together.

| File | Role |
|---|---|
| `rtl/cm_pkg.sv` | widths, fixed-point formats, event structs, saturation helpers |
| `rtl/cm_top.sv` | top level |
| `rtl/cm_controller.sv` | batch and iteration sequencer |
| `rtl/roi_filter.sv` | ROI test, writes accepted events to the buffer |
| `rtl/ref_time_calc.sv` | batch min/max time, `t_ref`, serial reciprocal of the half span |
| `rtl/bram_sdp.sv` | simple dual-port block RAM, read-first, zero at configuration |
| `rtl/event_reader.sv` | replays the stored events |
| `rtl/event_warp.sv` | 4-stage warp pipeline |
| `rtl/bilinear_vote.sv` | weights, derivative terms, bank routing |
| `rtl/pixel_accumulator.sv` | one accumulation bank: 3-stage read-modify-write with forwarding, read-and-clear |
| `rtl/gradient_calc.sv` | running means, readout, correlation sums, gradient |
| `rtl/flow_update.sv` | gradient-ascent step |
| `rtl/roi_update.sv` | fractional ROI position |

### Top-level interface

| Port | Dir | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `ev_valid`, `ev_ready`, `ev`, `ev_last` | in/out/in/in | event stream (`event_t` = 32-bit t, 8-bit x, y, 1-bit p); `ev_last` marks the batch's last event |
| `roi_load`, `roi_init_x`, `roi_init_y` | in | set the ROI corner (signed 16-bit) before the first batch |
| `result_valid` | out | one-cycle pulse at the end of a batch |
| `vx`, `vy` | out | velocity, signed Q.12, pixels per half batch duration |
| `roi_x`, `roi_y` | out | current ROI corner |
| `n_events`, `overflow` | out | events stored for this batch; buffer overflowed |
| `optimising` | out | a batch is being optimised (input stalled) |

`ev_ready` is high only while a batch is being collected. The source must
hold events while the design optimises.

## Memory banking: absorbing four votes per cycle

Each event writes four pixels of three images in every iteration. That is
twelve read-modify-writes per cycle. The four neighbours `(i,j)` to
`(i+1,j+1)` always contain one pixel of each coordinate-parity class. So each
image is split into four banks by parity of the ROI-relative coordinates:

```
bank    = 2·x[0] + y[0]        (0: x even, y even   1: x even, y odd
                                2: x odd,  y even   3: x odd,  y odd)
address = (y >> 1)·(ROI_W/2) + (x >> 1)
```

For a 64×64 ROI, each bank holds 1024 words of 32 bits. Every event then
touches exactly one word in each of the 12 banks. `bilinear_vote` works out,
for each bank, which of the four neighbours it gets. It does this from the
parity of `i` and `j`. It then negates the derivative term where the bank
holds the `+1` neighbour. Votes that land outside the ROI are dropped.

Parity is taken relative to the ROI corner, not the sensor, so the mapping
does not change as the ROI moves. `ROI_W` and `ROI_H` must be powers of two.

## The read-modify-write hazard

A bank update takes three cycles:

1. issue the read;
2. add the contribution to the value read;
3. write the sum back.

Two events close together in time often hit the same pixel within three
cycles. The second would then read a value that the first has not yet
written back, and one vote would be lost.

`pixel_accumulator` keeps the last three sums and their addresses in
registers. In stage 2, the newest register entry with a matching address
replaces the RAM data. The RAM is read-first, so a read in the same cycle as
a write to that address returns the old word. The three entries cover
exactly the writes that are still in flight.

The testbenches count forwarding hits. A 64×64 batch produces thousands of
them, and with fewer than three entries the images are wrong.

## Clearing without a reset

Block RAM cannot be reset. The banks start at zero from configuration.
After that, each iteration's gradient readout clears them. The cycle after
a word is read for the gradient, a zero is written back to that word. When
the readout ends, all twelve banks are empty, ready for the next iteration.
No extra clearing pass is needed.

## Gradient in one pass

The gradient needs the image means before the per-pixel products can be
summed. Reading the images twice would cost another `Np/4` cycles.
Instead, `gradient_calc` adds up every vote as it is produced. The sum of an
image equals the sum of all votes that went into it. Dividing by `Np` (a
power of two) is a shift, so the means are ready when the readout starts.

The readout then takes `Np/4` cycles at four pixels per cycle. It uses 8
multipliers, an adder tree over the four lanes, and a wide accumulator. A
final shift applies the `2/Np` factor, and the result is saturated.

## Fixed-point formats

| Quantity | Format |
|---|---|
| timestamp | unsigned 32 bit |
| scaled dt | signed 18 bit, 15 fraction bits, clamped to ±1 |
| reciprocal of half span | `floor(2^31 / ceil((tN-t1)/2))`, 32 bit, from a 33-cycle restoring divider |
| velocity | signed 24 bit, 12 fraction bits, saturating |
| warped position | signed 24 bit, 8 fraction bits |
| image values (IWE, Gx, Gy) | signed 32 bit, 16 fraction bits |
| gradient | signed 48 bit, 24 fraction bits, saturating |
| η | unsigned 24 bit, 16 fraction bits; default `ETA = 262144` (4.0) |

No width in this design comes from a specification. Each was sized so that
a 64×64 ROI with several thousand events per batch cannot overflow an image
word, and so that sub-pixel motion stays visible.

The value of η is also this design's choice. With plain gradient ascent and
100 iterations, 4.0 brings the estimate to within about 25 % of the true
velocity on the test scenes (e.g. (4.38, -2.26) for a true (5, -3)). Tuning
η to the application is expected.

## Timing

From the first accepted event to `result_valid`:

```
cycles = N + 35 + ITERS · (n + Np/4 + 23)        (n > 0 events in the ROI)
cycles = N + 35 + ITERS · (Np/4 + 13)            (empty ROI)
```

Here `N` is the batch size, `n` is the number of events in the ROI, and
`Np = ROI_W·ROI_H`. The `35` covers the last-event hand-off and the
reciprocal divider. The per-iteration `23` covers:

* read/warp/vote latency: 3 + 4 + 3 cycles;
* accumulator drain;
* gradient pipeline;
* flow update;
* controller hand-offs.

The drain wait covers the accumulators' last two cycles whether or not the
last event's votes were valid. The batch time therefore depends only on `N`
and `n`, not on where the events land.

The structure matches the published cycle model,
`N + T(n + Lr + P/4 + Lv)`. That model has `Lr = 32` and `Lv = 35`; this
pipeline is shorter, with 23 cycles against 67. For the reference workload
(N = 5000, n = 800, 64×64, 100 iterations):

* this design: 189,735 cycles, or 0.90 ms at 210 MHz;
* published figure: 0.92 ms.

Clock frequency was not measured here; only simulation was done.

Storage at default size:

* event buffer: 8192 × 48 bits;
* banks: 12 × 1024 × 32 bits;

That is about 786 kbit, or roughly 24 36-kbit block RAMs.

## Departures and choices

Taken from the published architecture:

* ROI filtering into a BRAM event buffer;
* the reference time as the batch midpoint, with dt scaled to ±1;
* warp, bilinear voting and derivative terms;
* 12 parity banks;
* 3-stage accumulation with a 3-entry forwarding buffer;
* zero written behind each gradient read;
* gradient ascent;
* the ROI update by the final velocity;
* 100 iterations;
* a 64×64 ROI.

Own choices, where no detail was available:

* **Batch boundary.** Set by `ev_last` on the stream. `t1`/`tN` are the
  min/max over *all* events of the batch, not only those in the ROI.
* **Input stalls during optimisation.** Double buffering of the event input
  is not built.
* **Velocity starts at zero for every batch.** The ROI position keeps its
  fractional part between batches.
* **Event buffer depth is 8192.** Events beyond it are dropped and
  `overflow` is raised. Polarity is not stored, because the IWE ignores it.
* **Votes outside the ROI are discarded.**
* **The image means come from running vote sums**, not from a separate pass.
* **Bank numbering.** Within the parity scheme, the bank numbering (x parity
  as the high bit) is a reading of a diagram. Any fixed numbering works the
  same.
* **All widths, η, and the handshakes** (see above).
* **No processor.** Batches enter as a plain valid/ready stream. The
  original system fed it from an on-chip processor, which is not part of
  this RTL.

A full 240×180 frame as the ROI needs 256×256 power-of-two banks, 16× the
default memory. The RTL supports that by parameter, but it does not fit a
small FPGA. A 128×128 ROI needs four times the bank memory of the default.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog. Values are
checked against models written independently in the testbench. The
system-level tests use `tb/cm_ref_pkg.sv`, a class that re-implements the
whole algorithm bit-exactly in plain SystemVerilog integer arithmetic.

* `tb_cm_top`: a 16×16 ROI, 64-entry buffer, 4 iterations. It runs five
  batches, including a buffer overflow and an empty ROI. It checks every
  iteration's velocity, the event count, the ROI move and the cycle
  formula. It also counts how often each mechanism occurs:
  * filtering;
  * overflow;
  * input stall;
  * forwarding hits;
  * out-of-ROI votes;
  * ROI moves;
  * empty batch.

  It fails if any of these never happens.
* `tb_cm_top_full`: default parameters, two batches of 5000 events with
  about 800 inside the ROI. Each scene is a square outline moving at
  constant velocity, plus noise. All 100 velocity steps per batch are
  checked against the reference, along with the cycle count. It takes a few
  seconds in Verilator.
* `tb_cm_top_sensor`: the whole-sensor configuration. It uses a 256×256 ROI
  at the sensor origin, so all 5000 events of a batch are stored, and runs
  90 iterations with η = 16.0. The per-iteration velocities, the ROI move
  and the batch time of 1,931,665 cycles (9.7 ms at 200 MHz) are checked.
  Some votes land outside the ROI, which checks that the batch time does not
  depend on the data.

Simulation with plain Verilator (5.x). Run this from the directory that
holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/cm_pkg.sv tb/cm_ref_pkg.sv rtl/*.sv tb/tb_cm_top_full.sv \
  --top-module tb_cm_top_full -o sim
./obj_dir/sim
```

Replace the top module to run another testbench. The testbenches reset
everything they read, so they also pass with `+verilator+rand+reset+2`.

Limits of the verification:

* everything has been simulated, but nothing has been placed and routed or
  run on an FPGA;
* the cycle model is measured;
* the 210 MHz figure is an assumption taken over for comparison.
