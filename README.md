# A multistage neural network for first-level muon tracking

A first-level muon trigger has to estimate, for every bunch crossing, the
direction of a muon that crossed a set of multiwire chambers, and do so at the
collider rate with a fixed latency of well under a microsecond. This design
does it with a small, fully pipelined neural network. The detector it is built
for resembles the end-cap thin gap chambers of a large LHC experiment. It has
three plates: M1 with three gas gaps and M2 and M3 with two gas gaps each. The
first and last gaps are about 1.5 m apart. Every gap is read out as 50
channels of one bit each ("hit" or "no hit"). The network takes the 350 hit
bits of one event and returns the polar angle θ of the track segment. It
accepts a new event on every clock at 160 MHz and answers 11 clocks
(68.75 ns) later. It needs no reset or initialisation between events.

The RTL is a register-level implementation of the network structure, number
formats, throughput and latency published with the design. The trained
weights were not published. They are therefore not built in: they are loaded
through a configuration port (see *Loading the weights*).

## The idea: following the track from plate to plate

A plain convolutional network treats the seven gaps as one 50 × 7 image. This
network uses the layered structure of the detector instead, in the manner of
a track-following algorithm that runs inside-out:

```
 hits M1 <50x3> ─ Conv1D 3x3 ─ tanh ── s1 ─┬─ MaskedLinear ML_12 ─┐
                                           │                      + ─ tanh ── s2 ─ MaskedLinear ML_23 ─┐
 hits M2 <50x2> ─ Conv1D 3x2 ──────────────│──────────────────────┘                                    │
                                           └─ MaskedLinear ML_13 ──────────────────────────────────────+ ─ tanh ── s3
 hits M3 <50x2> ─ Conv1D 3x2 ──────────────────────────────────────────────────────────────────────────┘
                                                                                                            │
 s3 <50> ─ Affine 28x50 ─ ReLU ─ Affine 14x28 ─ ReLU ─ Affine 8x14 ─ ReLU ─ Affine 1x8 ─ θ
```

* **Observation.** Each plate's hits go through a convolution with a single
  filter, 3 channels wide, that spans all the plate's gaps
  (`conv1d_hit`). The result is a 50-value vector that is large where the
  plate was hit. Because the inputs are single bits, this layer only adds
  weights and needs no multipliers.
* **State.** `s1 = tanh(observation of M1)` is the track state after the
  first plate.
* **Projection.** A *masked linear* layer (`masked_linear`) carries a state
  onto the next plate. It is a 50 × 50 matrix in which output channel *j*
  may only use input channels within a narrow search window around *j*. All
  other weights are zero and are not built. A track at channel *j* on M1 can
  only continue within a cone on M2 and M3, so the windows cost almost no
  precision and remove about 90 % of the multiplications.
* **Merge.** The projected state is added to the next plate's observation
  (`vec_add`) and squashed with tanh (`tanh_lut`). A plate that saw nothing
  still passes the projection on, so a missing hit only weakens the track.
  Hits that agree along a track add up. M3 merges two projections, one from
  M1 (`ML_13`) and one from M2 (`ML_23`), with its own observation.
* **Readout.** A four-layer perceptron (`affine`, `relu_vec`) turns the final
  50-value state into θ.

`feature_extraction` holds the upper part of the picture and
`fully_connected` the lower part. `mnn_tracker` is the top level.

## Arithmetic

All values are two's complement fixed-point numbers, written here as
`<total bits, integer bits>` in the style of HLS `ap_fixed`. The number of
fraction bits is the parameter `FRAC` of every module, passed down from the
top. The default, `FRAC = 7`, is the "QF7" quantisation. `FRAC = 5` and
`FRAC = 3` give the coarser QF5 and QF3 variants of the same network.

| quantity            | format (bits, integer bits incl. sign) | at FRAC = 7 | origin |
|---------------------|----------------------------------------|-------------|--------|
| hit                 | 1 bit, value 0 or 1                    | 1           | published |
| activation          | `<FRAC+5, 5>`                          | `<12,5>`    | fraction bits published, integer bits chosen here |
| weight              | `<FRAC+3, 3>`                          | `<10,3>`    | fraction bits published, integer bits chosen here |
| bias                | `<FRAC+5, 5>`                          | `<12,5>`    | fraction bits published, integer bits chosen here |
| accumulator         | `<FRAC+13, 11>` (FRAC+2 fraction bits) | `<20,11>`   | FRAC+2 published, integer bits chosen here |
| output θ            | unsigned `<16,9>`, for every FRAC       | `<16,9>`    | published |

The published design sized each integer part to the smallest width that never
overflowed on its training set. Those ranges are not known, so the integer
widths above are generous choices. They are the localparams `DATA_I`,
`WGT_I`, `BIAS_I` and `ACC_I` in `rtl/mt_pkg.sv`.

Rounding is truncation towards minus infinity and overflow wraps around; no
value is ever saturated. A multiply-accumulate works in this order, which is
also the order of the bit-exact model in `tb/tb_ref_pkg.sv`:

1. Multiply: activation × weight → 2·FRAC fraction bits.
2. Floor each product to FRAC+2 fraction bits and wrap it to the
   accumulator width.
3. Add the products and the bias (shifted up two bits), wrapping at the
   accumulator width.
4. Floor to FRAC fraction bits and wrap to the activation width. The last
   layer instead converts to 7 fraction bits and 16 bits; with FRAC = 3 this
   is a shift to the left.

The last layer's 16 bits are read as unsigned. A negative sum therefore wraps
to a large θ, just as an `ap_ufixed` cast would.

**tanh** is a table with 1024 entries over [-4, 4). The index is
`x · 1024/8 + 512`, clamped to 0…1023, with x as a real number. At FRAC = 7
one table step is one input LSB, so the index is just the input code plus
512. Entry *i* holds `floor(tanh((i-512)/128) · 2^FRAC)`. The table is
computed at elaboration with `$tanh`. The published design names the tanh
activation but not how it is evaluated; the table follows the usual way HLS
tools build activations.

## Pipeline and timing

One event enters per clock and nothing ever stalls. The stages are:

| clock | M1 path                  | M2 branch           | M3 branch                   |
|-------|--------------------------|---------------------|-----------------------------|
| 1     | input register (all 350 hits) |                |                             |
| 2     | conv M1                  | delay               | delay                       |
| 3     | tanh → s1                | delay               | delay                       |
| 4     | ML_12, ML_13             | conv M2             | delay                       |
| 5     | add + tanh → s2          |                     | delay, ML_13 held           |
| 6     | ML_23                    |                     | conv M3, ML_13 held         |
| 7     | add + tanh → s3          |                     |                             |
| 8–11  | Affine 1…4 (ReLU before 2, 3, 4) |             |                             |

Every row ends in a register, and adders and ReLUs sit in front of the
register that follows them. The M2 and M3 hits are delayed as bits (2 and 4
clocks), which is cheaper than delaying their 12-bit observations. The ML_13
projection is delayed 2 clocks (`delay_line`). As a result, every adder only
ever sums values of the same event.

The 11-clock latency reproduces the published 69 ns at 160 MHz. The split into
stages is a choice of this implementation. The valid bit is the only state
that reset clears. `mnn_tracker` asserts that `out_valid` is only ever high
exactly 11 clocks after an `in_valid`.

## Top-level interface (`mnn_tracker`)

| port        | dir | width      | meaning |
|-------------|-----|------------|---------|
| `clk`       | in  | 1          | 160 MHz clock |
| `rst_n`     | in  | 1          | asynchronous active-low reset of the valid pipeline |
| `in_valid`  | in  | 1          | an event is on the hit inputs |
| `hits_m1`   | in  | [50][3]    | `hits_m1[channel][gap]` of plate M1 |
| `hits_m2`   | in  | [50][2]    | plate M2 |
| `hits_m3`   | in  | [50][2]    | plate M3 |
| `out_valid` | out | 1          | `in_valid` delayed by 11 clocks |
| `theta`     | out | 16         | track angle, unsigned, 7 fraction bits |
| `cfg_we`, `cfg_addr[15:0]`, `cfg_data[15:0]` | in | | weight write port |

The hit inputs would be fed by the detector's frontend-to-backend data links,
which are not part of this design. The unit of θ is whatever the network was
trained to produce. The published output format is an unsigned value with 9
integer bits.

## Loading the weights

Each layer keeps its weights in registers. A write of `cfg_data` to
`cfg_addr` takes effect at the next clock edge. Each register keeps the low
bits of `cfg_data` that fit its width. `cfg_addr[15:12]` selects the layer and
`cfg_addr[11:0]` the register inside it:

| layer | block | registers (local address) |
|-------|-------|---------------------------|
| 0 | conv M1 | `w[k][c]` at `k*3+c` (k = 0 is channel p-1), bias at 9 |
| 1 | conv M2 | `w[k][c]` at `k*2+c`, bias at 6 |
| 2 | conv M3 | as layer 1 |
| 3 | ML_13 (M1 → M3) | `w[j][k]` at `j*5+k`, multiplying input `j+k-2` |
| 4 | ML_12 (M1 → M2) | as layer 3 |
| 5 | ML_23 (M2 → M3) | as layer 3 |
| 6 | Affine 50→28 | `W[o][i]` at `o*50+i`, `b[o]` at `1400+o` |
| 7 | Affine 28→14 | `W[o][i]` at `o*28+i`, `b[o]` at `392+o` |
| 8 | Affine 14→8  | `W[o][i]` at `o*14+i`, `b[o]` at `112+o` |
| 9 | Affine 8→1   | `W[0][i]` at `i`, `b` at `8` |

A full load is 2769 writes. To load a model trained in floating point,
multiply each weight and bias by 2^FRAC (128 for QF7), round, and write it.
Weights must lie in [-4, 4) and biases in [-16, 16). The published network had these weights
compiled into the logic as constants. The port is this implementation's
substitute: it lets one netlist run any trained model. A synthesis flow can
turn it back into constants by tying the port off after loading.

## Where this departs from, or adds to, the published design

* **Search windows.** The published windows are the channel pairs whose hit
  correlation between two plates exceeds 0.01. The correlation values are not
  published as numbers. Here every window is a band of five channels centred
  on the output channel (`HALF = 2`, `OFFSET = 0`). That gives the published
  ~90 % sparsity, but it is not the published mask. Both numbers are
  parameters of `masked_linear`. An offset band would suit plates whose
  correlation runs off the diagonal.
* **Convolution details.** The 50-wide outputs of the one-filter
  convolutions imply "same" padding, and that is what is built. Each filter
  also gets a bias, as a convolution layer has by default; the published
  drawing shows none.
* **Integer widths, tanh table, stage split and weight port** are choices of
  this implementation, as described above.
* **QF5 and QF3** are instances with `FRAC` = 5 or 3. They keep the same
  integer widths, because the published integer widths are not known.
* **No compact CNN.** The publication also gives a conventional CNN (two
  convolutions over all 7 gaps, then a 184-16-8-4-1 perceptron) as the
  alternative it compares against. The multistage network beat it on
  resources and latency for the same resolution, and the CNN is not included
  here.

## Size

A generic (technology-independent) synthesis of `mnn_tracker` gives about
2900 multiply-accumulate cells, about 4600 flip-flops of pipeline and valid
state, and 167 memories. The memories hold the weight registers and the 150
copies of the tanh table, one per tanh element (1.9 Mbit of constant table
bits in total, before logic optimisation). On an FPGA the tables would share
block RAM or collapse into LUT logic; the published build used 75 block RAMs.
The published FPGA figures for QF7 (1389 DSP slices, 34.8 k LUTs, 5.4 k
flip-flops) are those of a vendor flow with the weights as constants, which
lets it drop zero weights and simplify constant multiplications. They are not
directly comparable to these counts.

## Files

`rtl/` — the design, one unit per file:

| file | contents |
|------|----------|
| `mt_pkg.sv` | integer widths and default fraction bits, geometry constants, layer numbers |
| `conv1d_hit.sv` | one-filter convolution over hit bits |
| `tanh_lut.sv` | element-wise tanh by table lookup |
| `masked_linear.sv` | banded sparse 50 × 50 projection |
| `vec_add.sv` | element-wise merge of 2 or 3 vectors |
| `relu_vec.sv` | element-wise ReLU |
| `affine.sv` | fully parallel dense layer |
| `delay_line.sv` | alignment shift register |
| `feature_extraction.sv` | the track-following part |
| `fully_connected.sv` | the 50-28-14-8-1 perceptron |
| `mnn_tracker.sv` | top level |

`tb/` — one self-checking testbench per unit (`tb_<unit>.sv`) and
`tb_ref_pkg.sv`. That package is a bit-exact integer model of every layer and
of the whole network, written separately from the RTL. Each testbench loads
random weights, streams stimuli one per clock, compares every output with the
model, checks the latency, and ends with a line
`TB_RESULT checks=<n> failures=<m>`.

`tb_mnn_tracker` runs the complete network at its full size. It runs three
periods at detector noise levels 0, 10⁻⁴ and 10⁻³ per channel, each with a
freshly loaded set of weights, using straight muon-like tracks with
inefficient gaps plus some random patterns. It also counts back-to-back
events, idle clocks, reloads, noise hits, missing hits, tanh saturation and
ReLU clipping, and fails if any of them never happened.
`tb_mnn_tracker_qf` runs the same kind of event stream through a QF5 and a
QF3 instance of the network. The weights are random, not trained, so the θ
values test the arithmetic but not tracking resolution.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/mt_pkg.sv tb/tb_ref_pkg.sv tb/tb_mnn_tracker.sv \
    --top-module tb_mnn_tracker -o sim
./obj_dir/sim
```

Use any other testbench name to test one unit. Building the top-level
testbench takes under half a minute. Simulating it (about 10,000 clocks,
including three weight loads) takes under a second.
