# PLOC: Pulsed Local Orientation Coding in SystemVerilog

Each pixel of a PLOC sensor is a free-running oscillator whose pulse rate is
proportional to its brightness. A pixel does not compare grey values with its
neighbours. It only notes **which of its neighbours pulsed at least once
between two of its own pulses**. That set of neighbours, coded as a small
number, is the pixel's *feature* for that interval. A neighbour brighter than
(or as bright as) the centre pulses in every interval. A darker one pulses in
only a fraction of them, and that fraction is the ratio of the two rates. Over
a few intervals each pixel therefore runs through a short, repeating list of
features, and how often each feature appears describes the local structure of
the image. Absolute brightness cancels out. Counting those occurrences,
keeping only the frequent features, and optionally checking that neighbouring
pixels agree, gives a compact and contrast-robust feature map.

The operator and a gate-level sketch of its cell come from C. Mayr and
R. Schüffny, "Neighborhood Rank Order Coding for Robust Texture Analysis and
Feature Extraction". This RTL is an independent implementation of that
design. Where the paper leaves a point open, a choice was made here; those
choices are marked below.

## Feature numbers

Every neighbour has a coefficient, and the feature is the sum of the
coefficients of the neighbours that pulsed in the interval (`ploc_pkg`):

```
 N4 (default):   .  1  .        N8:    1   2   4
                 2  R  4               8   R  16
                 .  8  .              32  64 128
```

Bit *i* of a feature word is the neighbour with coefficient 2^i. Rows count
from the top of the image.

Worked example, which the end-to-end testbench reproduces. The centre pulses
at rate λ0. Its neighbours pulse at ½λ0 (top), ⅔λ0 (left), λ0 (right) and
7⁄6λ0 (bottom). Right and bottom are then in every interval (4 + 8 = 12). Top
is in every second interval. Left is missing from one interval in three. Over
six intervals the features are 12, 13, 14, 14, 15 and 15: frequencies 1/6,
1/6, 2/6 and 2/6. With a significance threshold of 0.2 only 14 and 15 are
kept. The simulated 32×32 sensor gives 0.164, 0.168, 0.336 and 0.332 for this
cell, and the vector {14, 15}.

## The PLOC cell

`ploc_cell` = `pulse_pixel` + `ploc_acquire` + `ploc_store`.

* **Acquisition latches** (`ploc_acquire`). There is one set/reset latch per
  neighbour. A neighbour's pulse sets its latch, and the cell's own pulse
  clears them all.
* **Interim storage** (`ploc_store`). On the cell's own pulse, slave flops
  take the latch contents. They then hold the feature of the interval that
  just ended, while the latches start collecting the next one.
* **Valid flag**. The cell's own pulse sets it, and being read clears it. A
  scan that passes the cell twice within one interval therefore reads its
  feature only once.
* **Bus control**. The cell drives the bus only when its row and its column
  select lines are both high.

Timing is the subtle part. In the original circuit the latch reset is a
slightly delayed copy of the centre pulse, so that the slaves catch the old
contents first. Here everything runs on one clock, and every pulse is a
one-clock strobe. On the clock edge that ends a centre-pulse clock, the slaves
load `latch | neighbour pulses of this clock` and the latches clear.
Consequences:

* A neighbour pulse in the same clock as the centre pulse counts towards the
  interval that ends.
* A neighbour with exactly the centre's rate sets its bit in every interval,
  whatever its phase. This is the behaviour the operator expects.
* The bus output is combinational from the select lines. If a read and a new
  centre pulse fall in the same clock, the old feature is read and the flag
  stays set for the new one.

The tristate drivers of the original are modelled as AND gating, and the
central bus as the OR of all cells (`ploc_matrix`).

## Scanning and the rate condition

`readout_scanner` selects one cell per clock in row-major order, so each cell
is visited every `ROWS*COLS` clocks. Cells with a valid flag become words
`(feat_valid, feat_addr = row*COLS+col, feat)` one clock later. No feature is
lost as long as a full scan is no longer than the shortest pixel interval.
This is the "scan at the maximum pixel pulse rate" rule. With the pixel model
below, that interval is `2^ACC_W / (2^GRAY_W - 1)` clocks. `ploc_top` checks
at elaboration that `ROWS*COLS` fits: 1024 ≤ 2^18/255 = 1028 at the defaults.

After reset, scanning starts only once the accumulators have cleared their
array (`CELLS` clocks). A bright cell can replace its first, partial-interval
feature in that time. From the first complete scan onwards nothing is lost,
and the end-to-end testbenches check this on every pulse.

## Significance: accumulators and θ_M

`feature_accumulator` sits at the edge of the matrix. Each cell has one word
holding a counter per feature number, plus a count of all features received.
When a cell's 2^N-th feature arrives (N = `NORM_SHIFT`, default 6, so 64
intervals):

```
b'_k = 1   if   N_k / 2^N >= θ_M        for every feature k (0..15 for N4)
```

The division is only a shift. `N_k`, read as a fraction with N fractional
bits, is shifted left by `THETA_W-N` and compared with `theta_m`, which is an
unsigned fraction with `THETA_W` = 8 bits (0.1 ≈ 26, 0.2 ≈ 52). The vector
`b_vec` goes out with `b_addr` one clock later, and that cell's counters
restart. Each cell is normalised over its own 2^N intervals, so bright cells
report more often than dark ones. The counters are one array, read and
written back in the clock a word arrives. `ready` rises after the
reset-clearing sweep.

## Neighbourhood correlation

`ploc_correlator` keeps the latest `b'` of every cell. On `corr_start` it
sweeps all cells, one per clock, starting one clock after `start`. For each
of the eight N8 neighbours it computes:

```
A = 1   if  |b' ∩ b'_nb ∩ K| / |(b' ∪ b'_nb) ∩ K|  >=  θ_corr      (no divider:
                                              inter·2^8 >= θ_corr·union)
b_korr = 1   if   Σ A >= N_corr
```

`K` is `k_mask`. Neighbours outside the image, and pairs where the union is
empty, give A = 0. With a single feature in `K`, the test reduces to "the
centre has the feature, and at least N_corr neighbours have it too", for any
θ_corr > 0. Vector writes are still accepted during a sweep, so a
cell's result may use a vector newer than the sweep's start.

The paper treats this step as post-processing and does not place it on the
sensor. Here it is a separate block that the top instantiates after the
accumulators.

## The pixel model

`pulse_pixel` is a behavioural, but synthesizable, stand-in for the analog
photo-current oscillator. Each clock it adds the grey value to an `ACC_W`-bit
integrator. On overflow it pulses and keeps the remainder, which gives a rate
of exactly `gray / 2^ACC_W`. The first clock after reset integrates from the
start phase `init_phase`. It does not model jitter. The original analysis shows jitter errors of
about T_j/(3·T_2), under 2 %, which θ_M removes.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NB` (neighbourhood) | 4 | gate sketch and all results use N4; 8 also supported |
| `ROWS`, `COLS` | 32, 32 | not given; choice of this design |
| `GRAY_W` | 8 | choice |
| `ACC_W` (pixel integrator) | 18 | choice, set by the rate condition |
| `NORM_SHIFT` (N) | 6 | paper: "2^N features", N not given |
| `THETA_W` | 8 | choice (paper gives θ_M = 0.1, 0.2, θ_corr = 0.3) |
| `n_corr` port | 4 bits | paper uses N_corr = 5 |

With `NB=8` the feature words are 8 bits wide and the accumulator holds 256
counters per cell.

## Top-level interface (`ploc_top`)

* Inputs: `gray[ROWS][COLS]`, `init_phase[ROWS][COLS]` (the image and the
  oscillators' start phases), `theta_m`, `k_mask`, `theta_corr`, `n_corr` and
  `corr_start`.
* `pulse[ROWS][COLS]` and `scan_wrap` are for observation.
* `feat_valid/feat_addr/feat` carry the raw feature stream from the bus.
* `b_valid/b_addr/b_vec` carry the significance vectors: the sensor's
  output.
* `corr_busy`, `k_valid/k_addr/k_bit` and `corr_done` belong to the
  correlation sweep.

All state uses an asynchronous active-low reset `rst_n`.

## Departures from the original design

* One synchronous clock instead of asynchronous pulse-driven latches.
  Same-edge capture-then-clear replaces the delayed reset.
* AND gating and an OR bus instead of tristate drivers. One AND gate serves
  as both bus enable and valid clear; the sketch shows two AND gates without
  saying what the second one does.
* Border cells see missing neighbours as silent.
* The correlation stage is built in hardware.
* The readout from the chip (pads, protocol) is not specified and is left as
  the vector stream on the top's ports.

## Simulation

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The unit testbenches compare each block with
an independent reference. `tb_ploc_top` (8×8) and `tb_ploc_top_full` (the
default 32×32, about 20 s) model every pixel, cell and counter, and check:

* every pulse, stream word, vector and correlation result;
* the scan period;
* that no feature is lost;
* the worked example above.

They also count how often each mechanism occurred:

* coincident pulses;
* visits suppressed by the valid flag;
* border features;
* threshold decisions both ways;
* correlation results both ways;
* map writes during a sweep.

Two more end-to-end runs use the same checking:

* `tb_ploc_top_n8` runs the N8 configuration at 8×8.
* `tb_ploc_scene` runs a synthetic 32×32 scene with the significance and
  correlation settings of the original evaluation: θ_M = 0.1, single
  features 7, 11 and 14 with N_corr = 5, and the salient-point subset with
  θ_corr = 0.3. The scene has a grey-90 background, a bright square, a
  vertical and a horizontal line, and the worked-example patch.

`tb_ploc_scene` prints its maps. For example, the significance map of
feature 7 (top, left and right neighbours brighter or equal, bottom darker)
marks these cells:

* the lower edge of the square;
* the lower edge of the horizontal line;
* the bottom border row, where the missing neighbour counts as silent.

On this clean image N_corr = 5 leaves nothing, because an edge cell has only
two like neighbours. The salient-point sweep marks the vertical line and the
middle of the horizontal one.

`tb_ploc_jitter` covers pixel jitter, which the pixel model itself leaves
out. The testbench drives one cell's four neighbour lines at exactly the
centre's rate, but shifts every pulse by a triangular jitter of up to
±T2/20. That is the ratio of the original 1 ms / 20 ms example.

* 1.54 % of the pulses leave their interval. The analytical value is
  T_j/(3·T2) = 1.66 %.
* 1.09 % of the neighbour bits are omitted. This is lower, because a pulse
  that leaves one interval sometimes lands in a neighbouring one that its own
  pulse also left.

Every feature the cell reports is checked against the driven pulses.

Example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_ploc_top_full \
  rtl/ploc_pkg.sv -y rtl tb/tb_ploc_top_full.sv
./obj_dir/Vtb_ploc_top_full +verilator+rand+reset+2
```

`tb_ploc_top`, `tb_ploc_top_full`, `tb_ploc_top_n8` and `tb_ploc_scene`
share one body. They differ only in size constants, neighbourhood, image,
thresholds and sweeps, and in whether the top's parameters are overridden.
