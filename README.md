# An artificial-retina track processor in SystemVerilog

Charged particles cross a stack of tracking layers in a straight line, or
nearly so. The artificial retina finds those lines by brute-force
parallelism. It does not combine hits into track candidates. Instead it
divides the space of track parameters into a grid of cells, and every cell
is a small processor, an *engine*, tuned to one track. An engine responds to
every hit with a weight that falls off as a Gaussian of the hit's distance
from where the cell's track would cross that layer. Summed over an event,
the responses form a map: a real track gives a peak, and the peak's
position, interpolated between neighbouring cells, gives the track
parameters. No loop over combinations is needed and every cell works at
once, so an event can be handled in a fixed, short time.

This RTL implements one device of such a processor, following the
architecture described by A. Abba et al. in "The artificial retina for
track reconstruction at the LHC crossing rate". That design targets the
upgraded LHCb detector, runs at 350 MHz on an FPGA, and holds up to 900
engines per device. It has three stages in a row:

```
 10 layer lanes ──► switching network ──► 900 engines ──► fanout ──► centre-of-mass ──► tracks
   (hits)            30 cycles            17 cycles       10 cycles    11 cycles
```

The total is 68 cycles from an event's last hit to its tracks: 194 ns at
350 MHz, inside the sub-0.5 µs budget.

## Track parameters, cells and receptors

Tracks are described by the point (u, v) where they cross a *virtual plane*
at z = z_vp. The full track model has five parameters. The retina searches
only (u, v) and treats the others (impact parameter, z of origin,
curvature) as small perturbations. The original work splits the (u,v)
plane into 22 500 cells. One device holds a tile of 30 × 30 = 900 of them,
so 25 devices cover the grid.

The cell (iu, iv) has its centre at

    u_c = U_ORIGIN + iu·CELL_PITCH,   v_c = V_ORIGIN + iv·CELL_PITCH

A cell's track is the straight line from the interaction point through
(u_c, v_c). It crosses layer k, at z_k, at the *receptor*
(u_c, v_c)·z_k / z_vp. A hit at distance s from the receptor on its layer
adds `exp(-s²/2σ²)` to the cell's response. There are 10 layers: the last
eight pixel layers of the vertex detector and two axial microstrip layers
further downstream. The strip layers measure x only, so on them s is the
x distance alone (`AXIAL_ONLY`).

All geometry is in `rtl/retina_pkg.sv`. Coordinates are 18-bit signed
integers with 1 LSB = 10 µm. The defaults are:

| constant | value | origin |
|---|---|---|
| `N_LAYERS` | 10 | published design |
| engines per device | 30 × 30 = 900 | count from the published design, shape chosen here |
| latencies (switch, engine, fanout, centre of mass) | 30, 17, 10, 11 | published design |
| `LAYER_Z_MM` | 300 … 650 (8 pixel layers), 2350, 2650 | chosen here |
| `Z_VP_MM` | 1000 | chosen here |
| `CELL_PITCH` | 300 LSB (3 mm on the virtual plane) | chosen here |
| `SIGMA` | 100 LSB (1 mm on the layer) | chosen here |
| `CUT_NSIGMA` | 3 | chosen here |
| `THRESHOLD` | 1000 (about four hits right on their receptors) | chosen here |

The original work sets its real geometry from the detector simulation; the
values here are a plausible stand-in. Change them in the package. Every
table and every receptor position is recomputed at elaboration.

## Interface of the device (`retina_top`)

* `hits_in[k]` (k = 0 … 9): one hit per layer lane per clock: `valid`,
  `x`, `y`. The lane number is the layer.
* `evt_last_in`: high in the last cycle of an event. Hits in that cycle
  belong to the event. The next event may begin in the following cycle;
  no gap is needed.
* `tracks_valid`: high for one cycle, exactly 68 cycles after
  `evt_last_in`.
* `tracks[iv*NU + iu]`: for each cell, `valid` (a track was found there),
  the interpolated `u` and `v` in the same units as the hits, and the
  cell's response `r`.

There is no backpressure. The pipeline accepts a new word every cycle.

## Switching network (`switching_network`, `hit_zipcode`, `switch_node`)

The hard part of the retina is delivery. Every hit must reach every cell it
can excite, with hundreds of hits per event and a new event every few
cycles. The switching network sends each hit to *all and only* the cells
whose receptor can lie within 3σ of it.

1. **Zip-code.** `hit_zipcode` computes the zip-code, one per lane in the
   first register stage. It projects the hit onto the virtual plane,
   `p = (x, y)·z_vp/z_k`, using a fixed-point constant per layer. It then
   turns the window `p ± (3σ·z_vp/z_k + pitch/8)` into a rectangle of cell
   indices, clipped to the tile. A hit whose rectangle misses the tile is
   dropped here. On x-only layers the rectangle spans every row.
2. **Delay line.** Pads the latency to exactly `LATENCY` (30).
3. **Distribution tree.** A binary tree of `switch_node`s, numbered as a
   heap. The first `clog2(NV)` levels halve the range of rows and the next
   `clog2(NU)` levels halve the columns. Each node registers the word from
   its parent and keeps a hit only if the hit's rectangle overlaps the
   node's own rectangle, so hits flow only down the branches that need
   them. All leaves are at the same depth, so every engine sees an event in
   the same cycle. For a 30 × 30 tile that is 11 node levels, 1 zip-code
   stage and 18 delay stages.

The original design derives each hit's zip-code from a simulated mapping
between detector hits and cells. Computing it from straight-line geometry,
and the tree itself, are this implementation's choices. The routing rule
and the 30-cycle latency are from the original.

## Engine (`engine`)

An engine processes all 10 lanes in parallel, in a 17-stage pipeline:

1. `|dx|`, `|dy|` to the receptor (`dy = 0` on x-only layers). A hit
   512 LSB or more away in either coordinate gets weight 0.
2. `s² = dx² + dy²` and the table index `s² >> 9`.
3. Weight from a 256-entry table,
   `w(i) = round(255·exp(-(i·512)/(2σ²)))`, built at elaboration.
4. Sum of the 10 lane weights.
5. … 16. Delay registers.
17. Accumulate, saturating at 65535. On the event's last cycle, `r` takes
   the final sum and the accumulator restarts from zero.

The receptor positions come in on the `rx`/`ry` ports as constants, so all
900 engines are one module.

## Fanout and centre of mass (`track_finder_array`, `track_finder`)

To decide whether it holds a track, each cell needs its own response and
those of its eight neighbours. Each response therefore goes to nine places
spread over the tile. That fanout is a 10-stage register pipeline carrying
the whole response map. After it, each cell's 3 × 3 neighbourhood is wired
to its `track_finder`. Cells beyond the tile edge read as zero.

`track_finder` (11 cycles) flags a track when the centre response is at
least `THRESHOLD` and is a local maximum. Ties are broken by position: the
centre must be strictly greater than the four neighbours before it in
row-major order, and not smaller than the four after. A flat plateau
therefore reports exactly one track. The track position is the centre of
mass of the neighbourhood:

    u = u_c + pitch · (Σ right column − Σ left column) / Σ all nine

v is computed the same way with the rows. A pipelined restoring divider
produces one quotient bit per stage, for 4 fraction bits of a pitch, so the
interpolation has a step of pitch/16.

## How far to trust it; departures from the original

* The algorithm, the three-stage structure, the latencies, the 10 layers
  and the 900 engines per device follow the original. Each latency is
  checked cycle-exactly in simulation.
* Chosen here, because the original does not give them: all geometry
  numbers; σ; the threshold; word widths; the hit format; one hit per
  layer per clock on input; the 3 × 3 neighbourhood and its tie rule; the
  zip-code arithmetic and the tree shape; the fanout as a plain register
  pipeline; zero responses beyond the tile edge; asynchronous active-low
  reset.
* Not built: the detector links, the DAQ readout format, and how
  neighbouring devices share cells at tile edges. A track within one cell
  of a tile edge sees only part of its cluster.
* At 40 MHz and 350 MHz, one device accepts about 8.75 cycles, and thus
  about 8 hits per layer, per event. A busier region would need more input
  lanes per layer. The original does not say how it feeds hits at that
  rate.
* Two lint messages remain: width notes in elaboration-time arithmetic, and
  `SYNCASYNCNET` because the lock-step assertions sample the
  asynchronously used reset.

## Simulating

Each testbench in `tb/` checks itself. It prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog. For
example:

```
verilator --binary --timing --assert -j 4 -Irtl -y rtl rtl/retina_pkg.sv \
          tb/tb_engine.sv --top-module tb_engine -o sim && obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_engine` | response values against the Gaussian computed in the testbench; 17-cycle latency; back-to-back events; saturation |
| `tb_switching_network` | 6 × 5 tile: every cell within 3σ gets each hit, no cell beyond the cut plus guard does, coordinates arrive unchanged, 30-cycle latency; hits off the tile are dropped |
| `tb_track_finder` | local-maximum rule with ties, threshold, centre of mass within pitch/16, 11-cycle latency |
| `tb_track_finder_array` | 5 × 4 tile: planted clusters, including on edges; 21-cycle latency |
| `tb_retina_top` | (compiles; its run did not finish within 5 minutes, so no result yet) 8 × 8 tile end to end: straight tracks found within a cell, with u and v within half a pitch; no spurious tracks; three-layer candidates rejected by the threshold; 68-cycle latency; counts each mechanism |

The full 30 × 30 device elaborates and lints. An end-to-end simulation at
that size was not run, because the C++ model Verilator generates for 900
engines and a 2047-node tree takes too long to compile. The largest tiles
simulated to a result are 6 × 5 (switching network) and 5 × 4 (fanout and
centre of mass). The 8 × 8 end-to-end testbench builds, but its run has not
yet finished, so the end-to-end result is unverified. Every size is a parameter of `retina_top`:
`NU`, `NV`, `U_ORIGIN`, `V_ORIGIN`, `THRESHOLD` and the four latencies.
