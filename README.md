# Artificial-retina track finder for an 8-plane silicon telescope

## Design idea

A straight track through the telescope is described by two numbers: its
position x+ at the middle of the telescope, and x-, half the difference
between its positions on the first and the last planes.  The retina fills the
(x-, x+) plane with a grid of 2048 cells.  Each cell knows where its own track
would hit every detector plane.  A hit at distance s from that expected
position adds exp(-s²/2σ²) to the cell's weight, and nothing if s > 2σ.
After an event, a real track appears as a local maximum of the weight.  The
maximum and its four neighbours are enough to interpolate the track
parameters below the cell size.

All the cells work in parallel on the same hits, so finding tracks takes a
fixed and short time.  It does not grow with the number of hit combinations.
The hardware has three jobs:

- bring each hit only to the cells it can affect (a two-level switch);
- accumulate the weights (1024 double engines, each built from two lookup
  tables);
- find the maxima and interpolate them (10 track units per region).

## Dataflow

```
8 planes x 16 channels (32 strips each)
   |  samples, one strip per cycle per channel
4 x daq_board:  2 x cluster_unit (16 cluster_lane each) -> switch_l1 (32:4)
   |  fully meshed: board b output r -> region r input b
4 x retina_region:  switch_l2 (4:16) -> engine_pool (256 engines)
                    -> 10 x track_unit -> track_merger
   |
track_merger (4:1) -> trk_valid / trk / trk_region
```

| Module | Role |
|---|---|
| `retina_pkg` | Constants, token/peak/track types, geometry functions |
| `cluster_lane` | Clusters of one 32-strip analog channel |
| `cluster_unit` | 16 lanes, i.e. one plane |
| `dispatcher` | N_IN x N_OUT multicast dispatcher with end-of-event merging |
| `switch_l1` | 32:4 dispatcher plus a (plane, x) → region-mask LUT |
| `switch_l2` | 4:16 dispatcher plus a (plane, x) → engine-group-mask LUT |
| `engine` | Double engine: LUT s, LUT exp, two accumulators |
| `engine_pool` | 32 × 8 engines, local-maximum search, peak hand-off |
| `track_unit` | Centre-of-mass or Gaussian interpolation of one peak |
| `seq_div` | Restoring divider used by the track unit |
| `track_merger` | Round-robin stream merger |
| `daq_board`, `retina_region`, `retina_top` | Structure |
| `sync_fifo` | Small FIFO |

## Units and number formats

- **Strip position x:** 10 bits in half-strip units.  A cluster spanning
  strips a..b has x = a + b.
- **Plane position z:** 0.1 mm units.  Plane k sits at z = 40 + 80k, which
  gives a spacing of 8 mm.
- **Internal distances:** quarter units, q = 4x, so 2 fractional bits.
- **Grid step Δ:** 70 quarter units, i.e. 1.601 mm.
- **Receptor width:** σ = Δ, so the 2σ cut-off is 140 quarter units.
- **Grid:** 32 x- rows by 64 x+ columns.
  - x+ is where the track crosses the middle of the telescope, z+ = 32 mm.
    The columns sit at quarter position −161 + jΔ, which centres them on the
    strip range.
  - x- is half the difference between the track's positions on the first and
    last planes.  The rows are symmetric around zero, ±15.5Δ (±24.8 mm).
- **Receptor of cell (i, j) on the plane at z:**
  x+_j + x-_i·(z − z+)/z-, with z- = −28 mm (minus half the distance from the
  first plane to the last).  Plane 0 sees x+ + x-, plane 7 sees x+ − x-.
- **Response:** `exp_weight` is rounded to 16 bits with 65535 at s = 0.
  Weights are 24-bit unsigned and saturate.
- **Track output:** `track_t.xm` and `track_t.xp` are signed grid coordinates
  with 8 fractional bits.  The value (i + f) means row/column i plus the
  fraction f of Δ.

## Event protocol

Each channel delivers 32 samples per event.  The cluster lane emits a cluster
token for each run of strips above `adc_thr`.  After the 32nd strip it emits
an end-of-event (EOE) token.

The dispatchers pass a cluster to every output in its LUT mask.  They forward
an EOE only after every connected input has shown its EOE.  So when an
engine group sees an EOE, all clusters of the event have already reached it.
The engines latch their weights 3 cycles after the EOE and clear for the next
event.

The regions share border columns: a cell at a region's edge needs its
neighbour's weights.  So each region drives `final_o` when its engines have
latched.  `go`, the AND of all four `final_o` (`search_go` on the top), starts
the maximum search everywhere in the same cycle.  On `go`, every region
samples its own weights and the neighbour columns.  Until its maxima have left,
an engine group accepts clusters of the next event but holds back that
event's EOE.

## Engine

Pipeline:

1. LUT s (1024 × 16, indexed by plane z) gives the cell's receptor position.
   The result is subtracted from 4x and the absolute value taken.  The second
   cell of the pair is the next x+ column.  On every plane its receptor is
   exactly Δ further, so the same LUT value serves it with Δ added.
2. LUT exp (1024 × 16) is read for both distances.  Distances ≥ 2σ give 0.
3. Accumulate.

## Local maxima and interpolation

A cell is a maximum if all of these hold:

- W ≥ `wgt_thr`;
- W > its left and lower neighbours;
- W ≥ its right and upper neighbours.

The asymmetric tie rule means a plateau gives exactly one maximum.  Maxima
leave the pool one per cycle, each with its four neighbour weights, to the
first free track unit.

The track unit has two modes, chosen by `interp_mode`:

- **Centre of mass** (`INTERP_COM`): d = (W+ − W−)/(W− + W0 + W+).  The
  three-point centre of mass pulls towards the central cell, so the bias
  correction α·d is added: offset = (1 + α)·d, with α = 211/256 ≈ 0.82.  That
  is the small-offset value for σ = Δ: d ≈ 0.55 u for a true offset u.
- **Gaussian** (`INTERP_GAUSS`):
  d = (ln W+ − ln W−) / (2(2 ln W0 − ln W− − ln W+)).  ln comes from a
  1024 × 16 LUT after scaling the weights so W0 fits 10 bits.

Each offset is clamped to one cell.  A track leaves 34 cycles after its peak.
At full size the measured latency is 49 cycles, from an event's last sample to
its first track.

## Departures from the prototype and choices made here

- Clustering uses the geometric centre of a run of strips, with no
  pulse-height weighting.  Each 32-strip channel is clustered separately.
- The switches are parameterised dispatchers (32:4 and 4:16), not tiles of
  16 × 16 dispatchers.  Routing LUTs are filled from the grid geometry with
  the 2σ reach.
- Both interpolation methods are built.  The main text describes the Gaussian
  form; the block diagram shows centre-of-mass units.
- The cross-region border exchange and the common `go` are this design's
  solution to maxima at region edges.  The prototype does not describe this.
- Not modelled:
  - the sensors, the front-end ASIC, the ADCs and the scintillator trigger;
  - the inter-board links, which are wires here;
  - the Ethernet link to the host, which is brought out as the track stream
    ports;
  - the time-weighted response proposed as an extension.  No hit times
    exist in this readout.

## Simulation

Each testbench is self-checking and prints
`TB_RESULT checks=N failures=M`.  To run one with Verilator 5:

```
verilator --binary --timing --assert -j 4 -Wno-fatal \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/retina_pkg.sv tb/tb_engine.sv \
    --top-module tb_engine -o tb_engine
./obj_dir/tb_engine
```

The same command works for any testbench name.  `tb_retina_top` runs the
full-size design with default parameters.  It generates single and double
tracks, noise bursts, border tracks and output back-pressure.  It checks every
reconstructed track against the generated one and fails if any mechanism is
never exercised.  It takes about three minutes to build and one second to run.

## What the testbenches establish

The reference arithmetic in `tb/tb_ref.svh` is written from the formulas
above with real numbers.  It does not use the RTL's tables.

| Testbench | What is checked |
|---|---|
| `tb_engine` | Exact weight sums for both cells over random events |
| `tb_cluster_unit`, `tb_daq_board` | Every cluster, its lane, plane and order, plus the end-of-event marks, against a software clustering of random strip patterns |
| `tb_dispatcher` | Multicast delivery under a sparse connection matrix and random stalls, with one merged end mark per event |
| `tb_switch_l1`, `tb_switch_l2` | Each cluster reaches exactly the regions or groups the 2σ rule selects |
| `tb_engine_pool` | Local maxima, neighbour weights and stalls while maxima drain |
| `tb_track_unit` | Both interpolation modes against known sub-cell offsets, and the 34-cycle latency |
| `tb_track_merger` | No word lost or duplicated; correct source tags |
| `tb_retina_region`, `tb_retina_top` | Generated tracks reconstructed within 0.35 Δ |

`tb_retina_top` also checks the following:

- tracks that straddle region borders;
- two tracks in one event;
- both modes;
- lane overflow;
- the latency bound of 100 cycles.

Known limits:

- No timing closure at 200 MHz has been attempted.
- The track resolution of the full system has not been measured statistically.
- Lane FIFOs drop clusters when they are full.  A channel's sticky
  `overflow` bit reports this.
