# Heartbeat classification with a network of lookup tables

This is synthesizable SystemVerilog for a heartbeat classifier. It sorts each
beat of a single-lead ECG into one of the four AAMI classes N (normal),
S (supraventricular ectopic), V (ventricular ectopic) and F (fusion). The
classifier is not a neural network with multipliers. It is a network of
small Boolean functions: 2-input logic gates (a *logic gate network*, LGN)
or N-input lookup tables (a *LUT network*, LUTN). The wiring between layers
is random and fixed. Training chooses only the function of each gate or LUT.
Inference then costs one pass through a few thousand LUTs, which takes one
clock cycle, plus a population count per class.

The design follows the published method "Inter-patient ECG Arrhythmia
Classification with LGNs and LUTNs" (Mommen et al.): the network structure,
the LUT-as-multiplexer neuron, the population-count readout, the 138-bit
binary feature vector and the rate-coded variant. That publication gives the
features as formulas and the network as a training method. It does not give
trained tables, the trained wiring, or hardware for the preprocessing. Every
point where this RTL had to decide for itself is listed under
[Departures and own choices](#departures-and-own-choices).

## Signal flow

```
 sample, sample_valid ──► ecg_sample_buffer (1024 x 11 bit, circular)
                                   │ sync read
 peak_flag ──► rr_features ──► one-deep queue ──► beat_morphology
               (RR1..RR4,        (waits until         (M1, M2, M4,
                local RR stats)   R0+200 is stored)     cf1, cf2)
                                   │                      │
 delta_bits (74, external) ────────┴──────► 138-bit feature register
                                                          │
                                   lutn_network (LAYERS x WIDTH N-input LUTs)
                                                          │
                                   class_popcount (4 groups of WIDTH/4 outputs)
                                                          │
                                   class_argmax ──► class_valid, class_out, class_sums
```

In rate-coded mode (`RATE_CODED = 1`) the front end is replaced:
`rate_features` ──► `rate_encoder` ──► `lutn_network` ──► `spike_counter` ──►
`class_popcount` ──► `class_argmax`.

The default parameters give the single-layer network of 2000 6-input LUTs
(`N = 6`, `WIDTH = 2000`, `LAYERS = 1`). The other published networks are
parameter settings of the same RTL:

| network          | `N` | `WIDTH` per layer | `LAYERS` |
|------------------|-----|-------------------|----------|
| LGN              | 2   | 8000              | 1 to 4   |
| 4-input LUTN     | 4   | 3000              | 1 to 4   |
| 6-input LUTN     | 6   | 2000              | 1 to 4   |

## The neuron: one function, two encodings

Every neuron is a truth table. `lut_neuron` is a 2^N:1 multiplexer whose
select lines are the neuron's inputs L_0..L_{N-1} and whose data inputs are
the table bits W_0..W_{2^N-1}. **L_0 is the most significant select bit.**
Entry W_i is chosen when the bits L_0 L_1 ... L_{N-1} spell i in binary. For
example, L_0..L_2 = 1,0,0 selects W_4. Table bit i of `cfg_table` is W_i.

For `N = 2` the layer uses `lgn_gate` instead. A 2-input neuron's 4-bit
table is then the **gate number** in the usual numbering of the 16
two-input gates:

| code | gate        | code | gate           |
|------|-------------|------|----------------|
| 0    | false       | 8    | NOR            |
| 1    | AND         | 9    | XNOR           |
| 2    | x0 AND NOT x1 | 10 | NOT x1         |
| 3    | x0          | 11   | x0 OR NOT x1   |
| 4    | NOT x0 AND x1 | 12 | NOT x0         |
| 5    | x1          | 13   | NOT x0 OR x1   |
| 6    | XOR         | 14   | NAND           |
| 7    | OR          | 15   | true           |

Read from the MSB down, the code's bits are the gate's outputs for
x0x1 = 00, 01, 10, 11. So the gate output is `op[~{x0,x1}]`. The same gate
as a 2-input LUT has the bit-reversed table. Keep this in mind when you
export a trained LGN: write gate numbers, not LUT tables, when `N = 2`.

## Wiring and loading a trained network

Input pin j of neuron n in layer l is connected to bit

```
conn_index(SEED, l, n, j, in_width) =
    mix32(SEED ^ mix32(l*0x9e3779b1 + n*0x85ebca6b + j*0xc2b2ae35)) mod in_width
```

Here `mix32(x)` is the integer finaliser
`x ^= x>>16; x *= 0x7feb352d; x ^= x>>15; x *= 0x846ca68b; x ^= x>>16`
(32-bit arithmetic), and `in_width` is 138 for layer 0 and `WIDTH` after
that. The method only requires random wiring that stays fixed during
training. Making it a pure function of a seed lets a training script rebuild
exactly the same network. To use wiring from elsewhere, replace
`ecg_lutn_pkg::conn_index`.

The tables sit in registers and are loaded one neuron per clock:

```
cfg_we = 1, cfg_layer = l, cfg_idx = n, cfg_table = W (or the gate number)
```

The tables have no reset. Load every neuron before classifying. A build that
never changes its network can tie these registers to constants, and
synthesis then folds each neuron into one FPGA LUT. That matches the
published FPGA numbers: 2000 LUTs for the 6-input network.

The last layer's outputs are split into four consecutive groups. Outputs
0..WIDTH/4-1 vote for N, the next group for S, then V, then F. Each group's
ones are counted, and the largest count wins. A tie goes to the lower class
index.

## Features

The 138-bit vector is the packed struct `ecg_lutn_pkg::feature_vec_t`, most
significant field first:

| field            | bits | definition (samples at 360 Hz) |
|------------------|------|--------------------------------|
| RR1..RR4         | 4x8  | RR1 = R_p1−R_0, RR2 = R_0−R_m1, RR3 = R_m1−R_m2, RR4 = R_m2−R_m3; code = min(255, RR/4) |
| d_rr_p, d_rr_m   | 2    | RR1 > RR2, RR2 > RR3 |
| loc_cv           | 2    | s/m > 0.5, s/m > 0.1, where m and s are the mean and standard deviation of the last 500 RR2 values |
| rr_ratio         | 2    | RR1/m < 0.5, RR1/m < 0.25 |
| tachy            | 1    | m < 216 samples (local rate above 100 bpm) |
| M1, M2, M4       | 3x3  | \|x[R_0] − min(beat[a..b])\| / (max(beat) − min(beat)) over beat[0..39], [65..84], [150..179]; code = min(7, floor(8M)) |
| cf1, cf2         | 2x8  | max\|x\| / RMS over the 180-sample beat and the 400-sample window; code = min(255, floor(16 cf)) |
| delta            | 74   | delta encoding, supplied from outside on `delta_bits` |

`beat` is the 180 samples R_0−90 .. R_0+89. The 400-sample window is
R_0−200 .. R_0+199.

**Rhythm features (`rr_features`).** The block keeps the last five peak
times. When a new peak R_p1 arrives, it emits the features of the previous
beat R_0. The local statistics are never recomputed. A 500-entry circular
buffer holds the RR2 values, and a running sum S1 and sum of squares S2 are
updated by one add and one subtract per beat. All threshold tests are exact
integer cross-multiplications, so the block needs no divider and no square
root. For example, with c values in the window, s/m > 0.5 becomes
4(c·S2 − S1²) > S1². While fewer than 500 beats have been seen, the window
is whatever has been seen so far. The window includes the current beat.

**Shape features (`beat_morphology`).** A beat can be processed only once
the 200 samples after its peak are stored. The top therefore queues the
rhythm features until then. The unit then sweeps the 400 samples out of the
circular buffer at one per clock. It keeps the running minima, maxima,
peaks and sums of squares, and finishes with an 8-step bit-by-bit search for
each crest-factor code: the largest q with q²·Σx² ≤ 256·L·peak². The M
codes need only seven constant-multiple comparisons each.

R-peak detection is not part of the design. Peaks come in as `peak_flag`,
for example from a data set's annotations or from a separate detector.

## Timing

* Sample input: one sample per `sample_valid`. The sample clock (360 Hz) is
  assumed to be far slower than `clk`. A beat needs about 420 clocks of
  processing, and the buffer gives it about 620 samples of slack.
* Rhythm features: two clocks after the peak's sample.
* Shape features: 410 clocks after the start.
* Classification: the feature register is loaded when the shape features
  are done. The network, popcount and argmax settle within that clock, and
  `class_valid` rises on the next edge. That is one clock per inference, as
  in the published FPGA build. `class_time` is the beat's R-peak sample
  number. `features` shows the vector that was classified.
* A finished beat that finds another still queued replaces it, and
  `beats_dropped` counts it. With real ECG this cannot happen, since it
  needs two RR intervals shorter than 200 samples in a row.

## Rate-coded mode

The rate-coded networks take 89 full-precision features (0..1, here 8-bit
fractions on `rate_features`). Each feature becomes a random bit stream
whose fraction of ones equals its value. Every feature has its own 16-bit
LFSR compared with the value, so the streams are independent, which is the
probabilistic reading of the gates that training assumes. After a pulse on
`rate_start`, the network runs 128 time steps, one per clock. An 8-bit
counter per output neuron counts its ones, and the class sums of those
counts decide the class 129 clocks after `rate_start`. The published FPGA
results show this mode is far larger and slower than binary mode for a
small gain: one counter per output neuron instead of one wire. For that
reason binary mode is the default. In this mode the feature extraction is
not instantiated, because the full-precision features and the extra
RR2/m feature are expected from outside.

## Departures and own choices

* The trained tables and wiring are not available. The tables are loadable
  registers, and the wiring comes from a seeded hash. Accuracy figures
  therefore depend entirely on the tables you load.
* The 8-bit RR code (RR/4), the 3-bit M code, the 8-bit crest-factor code
  (4 fractional bits) and the bit order of the feature vector are not
  specified by the method and were chosen here. A training flow must use
  the same encodings.
* The source text calls m/s the "coefficient of variation". Here the
  thresholds 0.5 and 0.1 are applied to s/m, the usual coefficient of
  variation. Applied to m/s, both bits would nearly always be 1.
* The tachycardia bit uses the mean of the local RR window.
* The delta-encoding bits are not computed, because their encoding is only
  referenced to other work.
* The sample buffer, the queue between the two feature units, argmax
  tie-breaking and counter saturation are this design's own.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_ecg_classifier_top \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/ecg_lutn_pkg.sv tb/tb_ref_pkg.sv \
  tb/tb_ecg_classifier_top.sv
./obj_dir/Vtb_ecg_classifier_top
```

* `tb_ecg_classifier_top` runs the whole design at reduced size: two layers
  of 16 4-input LUTs and an 8-beat RR window. It streams about 30 synthetic
  beats, checks every class and class sum against a software model of the
  network, checks the RR codes against the peak times, forces one dropped
  beat, and runs the rate-coded mode.
* `tb_ecg_classifier_full` does the same at the default size: 2000 6-input
  LUTs and a 500-beat window, with random 64-bit tables. It runs in well
  under a minute.
* `tb_ref_pkg` holds the reference models (the wiring hash, the 16 gates,
  LUT lookup). They are written independently of the RTL.

To change the network, set `N`, `WIDTH`, `LAYERS` and `SEED` on
`ecg_classifier_top`. `WIDTH` must be a multiple of 4.

## Files

| file | content |
|------|---------|
| `rtl/ecg_lutn_pkg.sv` | constants, feature structs, class enum, wiring hash |
| `rtl/lgn_gate.sv` | 16-function 2-input gate |
| `rtl/lut_neuron.sv` | N-input LUT (2^N:1 multiplexer) |
| `rtl/lutn_layer.sv` | one layer: wiring plus table registers |
| `rtl/lutn_network.sv` | stack of layers |
| `rtl/class_popcount.sv` | per-class group sums |
| `rtl/class_argmax.sv` | winning class |
| `rtl/rr_features.sv` | rhythm features |
| `rtl/beat_morphology.sv` | shape features |
| `rtl/ecg_sample_buffer.sv` | 1024-sample circular ECG store |
| `rtl/rate_encoder.sv` | LFSR bit-stream generator |
| `rtl/spike_counter.sv` | per-output 8-bit counters |
| `rtl/ecg_classifier_top.sv` | the whole classifier |
