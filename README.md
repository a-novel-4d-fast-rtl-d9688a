# A 4D artificial retina track finder in SystemVerilog

Charged particles crossing a telescope of silicon strip planes leave one hit per plane.
When the hits also carry a time stamp with about 10 ps precision, the time is as good a
discriminator as the position: a hit that is at the right place but at the wrong time was
not made by the track. This design finds straight tracks in real time by the *artificial
retina* method, extended to four dimensions: the two space parameters of the track and its
time.

The track parameter space is covered by a grid of cellular units ("engines"). Each engine
stands for one track hypothesis, given by two parameters:

* `x+`, the track position at the centre of the telescope, and
* `x-`, its slope scaled to half the telescope length: `x(z) = x+ + x-·(z - z+)/z-`.

For each plane the engine knows where its track would cross it (the *receptor*) and when it
would get there. Every hit adds a Gaussian of its distance from the receptor times a
Gaussian of its time difference. The space response is cut to zero beyond 2σ. Each
engine keeps three sums, one for each of three track-time hypotheses: `t0 - ΔT`, `t0` and
`t0 + ΔT`. `t0` is the nominal crossing time and ΔT = 400 ps. A real track makes the `t0`
sum peak at the engine nearest to it. Track parameters finer than the grid come from a
Gaussian fit through the peak and its neighbours along `x+`, `x-` and `t`.

The built configuration is the one meant for an FPGA board: 512 engines with a 3.3 mm
grid, clocked at 200 MHz, serving 8 planes with 180 µm strips.

## Data path

```
strips ─► cluster_unit ×8 ─► layer_mux ×4 ─► retina_switch 4:16 ─► engine_group ×16 ─► track_fitter ─► tracks
          (layer 0..7)       (layers 2m,2m+1)                       (fan_out + 32 engines)  (16 fan_in, 16 track_fit,
                                                                                              track_merge)
```

The top is `retina_top`. All shared types, constants and table functions are in
`retina_pkg`.

Every stream uses the same handshake. A word moves when `valid` is high and `hold` is low.
Otherwise the sender keeps the word and keeps `valid` high. Each event ends with one
end-of-event word (`eoe` bit set). Every merge point (MUX, switch) holds back an
end-of-event word until all its inputs have reached it, so an event never mixes with the
next one.

Number formats:

| quantity | format |
|---|---|
| x, receptor, track x+ / x- | signed 16 bit, 10 µm units |
| t | signed 16 bit, ps relative to t0 |
| Gaussian response | unsigned 8 bit, 255 = 1.0 |
| engine weight W | unsigned 24 bit, saturating |

## Geometry and grid

Plane k (k = 0..7) sits at `z_k = 100 + 40·k` mm from the interaction region. The centre
`z+ = 240` mm and half-length `z- = -140` mm of the telescope define the track
parameters. The 512 engines form 32 rows of `x+` by 16 columns of `x-`, both on a 3.3 mm
pitch centred on zero. One column (one `x-`) is one engine group. Row i has
`x+ = (2i - 31)·1.65` mm and column j has `x- = (2j - 15)·1.65` mm.

All tables are filled at elaboration by functions in `retina_pkg`, which use `$exp`,
`$sqrt` and `$ln`. In hardware they are constant ROMs:

* the receptor position of every engine on every plane,
* the expected arrival time `z_k/c·sqrt(1 + x-²/z-²)`,
* the exponential table,
* the logarithm table,
* the switch routing masks.

To change the geometry, edit the constants at the top of the package.

## Clustering and merging

`cluster_unit` takes one plane's fired strips, in ascending order, each with its time.
Neighbouring strips join one cluster, and a gap closes it. The cluster position is the
centre of its first and last strip, and its time is the earliest strip time. An
end-of-event word first flushes any open cluster. `layer_mux` merges two planes round
robin.

## Switch

`retina_switch` delivers each hit to every engine group that could respond to it. The
choice is made from space alone. A 1024 × 16 bit ROM, indexed by the plane and the top 7
bits of x (5.12 mm bins), gives the mask of groups. A group's bit is set when any receptor
of that group lies within 2σ of the bin. A hit that reaches no group is dropped.

Each input has one register that holds the word and its mask of outputs still to be
served. Each output has a round-robin arbiter over the inputs that want it, and an output
register. When an output takes a word, its bit is cleared. The input is free once the
mask is empty. This way one hit goes to several groups in the same cycle when they are
free, and to the others later. End-of-event words wait until all four inputs hold one.
They are then sent to all 16 outputs and all four inputs are released together.

## Engine: the hardest part

An engine (`engine`, parameters ROW and COL) handles one hit every four cycles:

```
S0  serializer: item 0 = |s|, items 1..3 = |t - t_exp(h)| for h = t0-ΔT, t0, t0+ΔT
S1  subtract from ROM values indexed by the plane, absolute value, shift, clip to 7 bits
S2  exp_lut (shared, 256 x 8: a space half and a time half)
S3  keep the space response e_s; form e_s · e_t(h)   (the DSP multiply, 8 x 8)
S4  add into W[h], saturating at 2^24 - 1
```

Items through the one table:

* The space item goes first. Its response is held in S3.
* The three time items then each make a product with it.

This is why the engine raises `hold` for the three cycles after it accepts a hit. The
space table is zero from 2σ outward, which gives the paper's cut. The time response has
no cut.

An end-of-event word follows the hits down the pipeline. When it reaches S4:

* the three sums are copied to `w_out` and `w_full` is set,
* the accumulators are cleared,
* so the next event can start at once.

The result stays until `w_ack`. A second end-of-event word that arrives while `w_full` is
still set is held back, so no result is overwritten. From the last hit to `w_full` takes
8 cycles.

`fan_out` broadcasts to the 32 engines of a group. Its register is released only when no
engine holds. All engines of a group run in lock step, so one hit still passes every 4
cycles.

## Track fitter

`track_fitter` waits until all 512 engines have a result. It then starts the 16
`track_fit` units together, one per column. Each unit scans its 32 rows through its
`fan_in`. For a row, the `fan_in` gives the three weights of that row, the `t0` weights of
the row above and below, and, through the fitter, the `t0` weights of the same row in the
two neighbouring columns.

A cell is a local maximum when its `t0` weight:

* reaches `THRESHOLD` (default 3·255², about three perfectly matched hits),
* is above its lower and left neighbours, and
* is at least its upper and right neighbours.

The unequal tests break ties, so a flat top yields one maximum. Maxima go into a 4-entry
queue. Any beyond that are counted in `ovf_cnt` and lost.

For each maximum the unit computes three Gaussian interpolations of the form

```
offset = step/2 · (ln(W-/W0) - ln(W+/W0)) / (ln(W-/W0) + ln(W+/W0))
```

along `x+` (rows), `x-` (columns) and `t` (the three hypotheses, step ΔT). The logarithm
base cancels in the ratio, so the unit uses base 2:

* the position of the leading one gives the integer part,
* a 64-entry table gives the fraction,
* three sequential dividers give 12-bit quotients.

A denominator of zero or above gives no offset. The quotient saturates at ±2 steps. The
track carries:

* its cell,
* `x+`, `x-` and `t` in the stream formats,
* its `t0` weight.

`track_merge` merges the 16 unit outputs round robin. The fitter waits for every unit to go
idle and the output to empty, then pulses `w_ack` to free the engines and counts
`n_events`.

## Timing

| stage | cycles | paper's estimate (5 ns units) |
|---|---|---|
| switch | 2 | about 14 |
| engine, last hit to result | 8 | about 15 |
| fitter | 33 scan + about 16 per maximum | about 30 |
| end of event to first track, measured | 77 - 90 | below 100 |

The input rate is one hit per group every 4 cycles.

## Following the paper and departing from it

These follow the paper:

* the algorithm, with the Gaussian responses, the 2σ cut, three time hypotheses with
  ΔT = 400 ps, and Gaussian interpolation along all three axes;
* the telescope geometry;
* 512 engines on a 3.3 mm grid;
* the block chain: 8 cluster units, 4 MUX, a 4:16 switch, 16 fan-outs of 32 engines, 16
  fan-ins and track fit units, one track output;
* routing from space information only;
* the engine's pair of plane-indexed tables, its single shared exponential table and
  serializer, and its three-cycle hold.

These are this design's own choices:

* σ = 2.2 mm and σ_t = 300 ps. The paper leaves them as tuning parameters.
* The split of the grid into 32 `x+` by 16 `x-`, and the values z+ and z-.
* The cluster algorithm, the handshake, the end-of-event words and barriers, and the
  double-buffered engine results.
* All widths and fixed-point formats, the threshold, the size of the candidate queue,
  and the switch LUT layout.
* Latencies. The switch and engine are shorter than the paper's estimates. The fitter is
  longer when a column holds several maxima.
* The space × time multiply is a plain `*`. An FPGA flow maps it to a DSP block.

Not built:

* the silicon sensors and the data acquisition, which are outside the board; the top
  takes strip streams;
* the 20,000-cell simulation grid, which the paper evaluates only in software.

## Testbenches and simulating

Each module in `rtl/` has a self-checking testbench, `tb/tb_<module>.sv`, with a
watchdog. Each prints `TB_RESULT checks=N failures=M`. The testbenches share a reference
model of the geometry and the responses, `tb/tb_model_pkg.sv`. It is written in `real`
arithmetic independently of the RTL tables.

`tb_retina_top` runs the full design at its default size:

* It generates events of one or two tracks with 0, 1 and 5 % noise strips.
* It checks that each track is found in the right cell and within tolerance.
* It checks that the latency stays under 100 cycles.
* It checks that each of these happens at least once: input stalls, multi-strip
  clusters, hits dropped by the switch, end-of-event barrier waits, an event
  accumulating while the previous result waits, and a held track output.
* It checks that no track candidate is lost. Candidate-queue overflow is exercised
  in `tb_track_fit`.

On clean events the measured r.m.s. errors are:

| parameter | r.m.s. error |
|---|---|
| `x+` | about 33 µm |
| `x-` | about 57 µm |
| t | about 2.5 ps |

The test has no hit-time smearing.

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/retina_pkg.sv tb/tb_model_pkg.sv tb/tb_retina_top.sv --top-module tb_retina_top
./obj_dir/Vtb_retina_top
```

Building the full design takes about two minutes. The simulation itself takes well under
a second. Some lint warnings remain:

* `SYNCASYNCNET` is caused by the assertions' `disable iff (!rst_n)`.
* `UNUSED` warnings are for the end-of-event bit and unused low bits in the fitter.
