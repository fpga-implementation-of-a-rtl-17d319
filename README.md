# Neural-network pulse-amplitude reconstruction for a high pile-up calorimeter

A calorimeter channel produces a shaped analog pulse whose height is
proportional to the energy deposited. The pulse is sampled every bunch crossing
(25 ns, 40 MHz), and the amplitude is estimated from a short window of
samples. The classical estimator is a fixed FIR filter ("optimal filtering")
tuned to the nominal pulse shape. It degrades when pulses from consecutive
crossings overlap (pile-up), because the shape it expects is no longer there.

This design replaces the filter with a small feed-forward neural network
trained offline on simulated pile-up data. It evaluates the network in a
fully pipelined, fixed-point datapath:

* one amplitude per channel for every bunch crossing, with no dead time;
* a fixed latency of 5 clocks from the 9-sample window to the amplitude;
* 48 channels side by side, as in one module of the ATLAS Tile Calorimeter
  read-out.

The network follows the published architecture of Ortiz Arciniega, Carrió and
Valero, "FPGA implementation of a deep learning algorithm for real-time signal
reconstruction in radiation detectors under high pile-up conditions". The
publication gives the network structure, the activation-table size and range,
the window length, the channel count and the latency. It does not give the
trained constants or the word widths. Those are this design's own choices and
are listed below.

## The network

Per channel, for the window `x[0..8]` of the last nine samples (`x[0]` oldest):

```
xn[i] = x[i] * gain1 + ymin1                 input normalisation
u1    = sum_i IW1[i] * xn[i] + b1            hidden neuron, net input
a1    = g(u1),  g(u) = 2/(1+exp(-2u)) - 1    tan-sigmoid, from a look-up table
a2    = LW2 * a1 + b2                        output neuron, linear
y     = (a2 - ymin2) * gain2                 back to ADC counts
```

The hidden layer is a single neuron. The published block diagram gives the
input weights as a 1 x m row and the output weight as 1 x 1, and this design
reads those dimensions literally. The output neuron has no activation: its
sum goes straight to the denormalisation. The normalisation and
denormalisation use one gain and one offset each, shared by all nine samples.
This is general enough for any affine scaling. "Loading a trained network"
below shows how to fold per-input scalings into these constants.

## Pipeline and timing

```
sample_in ─► sample_shift_reg ─► input_normalizer ─► hidden_layer ─► activation_lut ─► output_layer ─► output_denormalizer ─► y
              (9 taps)            stage 1             stage 2          stage 3           stage 4          stage 5
```

Each stage is one register. A valid bit travels with the data. All stages
hold their outputs while their `in_valid` is low, so the datapath can be
clocked faster than the sample rate: the shift register moves only on
`in_valid`.

* `in_valid` goes high with a sample on clock edge E0. The shift register
  captures the sample on E0 and presents the new window after E0.
* The amplitude of that window is registered on edge E5. `out_valid` and `y`
  are therefore valid 5 clocks after the window and 6 clock edges after the
  sample was presented. `ann_pkg::LATENCY = 5`.
* A new sample may be presented on every clock. With the clock at 40 MHz and
  `in_valid` held high, the design gives one amplitude per channel per bunch
  crossing.
* The first eight windows after reset contain zeros in place of the samples
  not yet received. Their amplitudes are computed like any other.

The publication says both that "an output result is obtained after one clock
period" and that the latency is 5 clock cycles. Here the first statement is
read as the throughput and the second as the latency. The publication does
not say how the 5 cycles are split between operations. This design gives one
cycle to each of the five operations of its block diagram. `ann_channel`
asserts that each window gives exactly one amplitude, exactly `LATENCY`
clocks later.

## Fixed-point formats

All formats are set in `ann_pkg`.

| quantity | type | width | fraction bits | notes |
|---|---|---|---|---|
| ADC sample `x` | `sample_t` | 12 unsigned | 0 | |
| `xn`, `u1`, `a1`, `a2` | `data_t` | 18 signed | 14 (`DATA_FRAC`) | range about ±8 |
| `IW1`, `b1`, `LW2`, `b2`, `ymin1`, `ymin2` | `coef_t` | 18 signed | 14 (`W_FRAC` / `DATA_FRAC`) | |
| `gain1` | `coef_t` | 18 signed | 24 (`GAIN1_FRAC`) | the gain is tiny (about 2/4095) |
| `gain2` | `coef_t` | 18 signed | 4 (`GAIN2_FRAC`) | the gain is large (about 2047) |
| amplitude `y` | `out_t` | 20 signed | 4 (`OUT_FRAC`) | ADC counts |

The 18-bit words match one port of a 7-series DSP slice. Products are formed
at full width, cut back to the destination's binary point by an arithmetic
right shift (truncation), and saturated to the destination width. Sums are
exact. With the default constants the whole chain stays within 1 ADC count of
a double-precision evaluation of the same network. The testbenches check
this bound.

## The activation table

The tan-sigmoid is the only non-linear operation. It is read from a table of
`LUT_DEPTH = 5000` entries. The publication chose 5,000 after comparing 100
to 20,000 entries. It lost 0.03 % of correlation against 20,000 entries and
gained a 4× smaller memory.

* **Range.** Entry `i` holds `round(2^14 · tanh(u_i))`, where
  `u_i = U_MIN + i·(U_MAX − U_MIN)/(DEPTH − 1)`, with `U_MIN = −1.0` and
  `U_MAX = 1.2`. The publication states this range without saying whether it
  bounds the argument or the value. Here it is taken as the argument range.
* **Addressing.** `addr = round((u − U_MIN) · (DEPTH − 1)/(U_MAX − U_MIN))`.
  The division by the span is a multiplication by the constant
  `IDX_SCALE = (DEPTH−1)/(U_MAX−U_MIN)` with 24 fraction bits. A half LSB is
  added before the shift, which rounds to the nearest entry.
* **Clamping.** Arguments at or below `U_MIN` read entry 0. Arguments at or
  above `U_MAX` read entry `DEPTH − 1`. Within the range, the table step is
  2.2/4999 ≈ 4.4·10⁻⁴. The worst-case error from the table is therefore half
  a step, about 3.6 LSB of `data_t`.
* **Contents.** The table is not a data file. `activation_lut` fills it at
  start-up, and the synthesis tool does so at elaboration, by calling
  `ann_pkg::tanh_q` for each entry. `tanh_q` uses only integer arithmetic. It
  computes `e = exp(−2u)` in Q.28 as `exp(x/8)^8` (a 10-term Taylor series,
  then three squarings), then `(1 − e)/(1 + e)` rounded to Q.14. Changing
  `DEPTH`, `U_MIN` or `U_MAX` regenerates both the table and the address
  scaling.
* **One table, many ports.** `activation_lut` has `N_PORTS` read ports. The
  top level instantiates one table with a port per channel, not one table per
  channel. Functionally the two are the same: every channel sees its own
  synchronous ROM. A synthesis tool maps a 48-port ROM onto as many block-RAM
  copies as it needs (two read ports per dual-port block RAM). One table
  description also keeps the start-up fill to a single 5,000-entry loop.
  Elaborators that evaluate the fill as a constant expression would otherwise
  have to repeat it 48 times.

## Loading a trained network

The default constants in `ann_pkg` are placeholders, not a trained network.
The published constants are not available.

* The input scaling maps the 12-bit range [0, 4095] onto [−1, 1].
* The hidden neuron weights the centre sample (weights
  −0.05, −0.05, 0, 0.15, 0.5, 0.15, 0, −0.05, −0.05; bias 0).
* `LW2 = 1`, `b2 = 0`.
* The output scaling maps [−1, 1] back to [0, 4095].

This gives a smooth, monotonic amplitude estimate that exercises every stage.
It is not an estimator tuned against pile-up.

To load a network trained with a min-max input/output mapping
(`xn = (x − xoffset)·gain + ymin` per input, and the reverse at the output),
convert its constants to the fixed-point formats above and pass them as
parameters of `ann_reconstructor`:

* If all inputs share one `gain` and one `xoffset`, set `GAIN1 = gain` and
  `YMIN1 = ymin − xoffset·gain`.
* If they differ per input, pick any `GAIN1`, and fold the rest into the
  hidden neuron. Set `IW1[i] ← IW1[i]·gain_i/GAIN1` and
  `B1 ← B1 + Σ IW1[i]·(ymin − xoffset_i·gain_i) − Σ IW1'[i]·YMIN1`, where
  `IW1'[i]` is the new `IW1[i]`.
* For the output, if the training mapping is `a2 = (y − xoffset)·gain + ymin`,
  set `GAIN2 = 1/gain` and `YMIN2 = ymin − xoffset·gain`.

Check that `|u1|` stays well inside ±8 and `|y|` inside ±32768 counts.
Otherwise adjust `DATA_FRAC` or `OUT_W`.

## Modules

| file | what it is |
|---|---|
| `rtl/ann_pkg.sv` | types, formats, default constants, saturation helpers, `tanh_q` |
| `rtl/sample_shift_reg.sv` | 9-tap sample shift register with shift enable |
| `rtl/input_normalizer.sv` | stage 1, `xn = x·gain1 + ymin1` for all taps |
| `rtl/hidden_layer.sv` | stage 2, weighted sum plus bias of the hidden neuron |
| `rtl/activation_lut.sv` | stage 3, the tan-sigmoid table with `N_PORTS` read ports |
| `rtl/output_layer.sv` | stage 4, `a2 = LW2·a1 + b2` |
| `rtl/output_denormalizer.sv` | stage 5, `y = (a2 − ymin2)·gain2` |
| `rtl/ann_channel.sv` | one channel: shift register and stages 1, 2, 4, 5, plus a port to the table |
| `rtl/ann_reconstructor.sv` | top: 48 channels, one shared table, common sample strobe |

All network constants are parameters of `ann_reconstructor`. They pass down
unchanged, so every channel runs the same network. The top's ports are
`clk`, `rst_n` (synchronous, active low), `in_valid`, `samples[48]`,
`out_valid` and `amplitudes[48]`.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog.

| testbench | what it checks |
|---|---|
| `tb_sample_shift_reg` | the window against a model queue, under random shift/idle patterns |
| `tb_input_normalizer` | exact fixed-point value, agreement with the ideal [0,4095]→[−1,1] map, 1-clock latency |
| `tb_hidden_layer` | exact sum with testbench weights, including saturation |
| `tb_activation_lut` | two ports against floating-point tanh over and beyond [−1, 1.2]; both clamps and the interior must occur |
| `tb_output_layer`, `tb_output_denormalizer` | exact values, saturation, latency |
| `tb_ann_channel` | pile-up pulse trains through one channel with 1.5× input weights. Checks every amplitude against a double-precision model of the network within 1 count, and the 6-edge latency. Both table clamps, back-to-back samples and idle gaps must each occur |
| `tb_ann_reconstructor` | the full 48-channel design at its default parameters. Same checks on every channel, plus overlapping pulses, idle gaps, back-to-back samples and the lower table end |
| `tb_dataset_20000` | 20,000 consecutive crossings on all 48 channels at one sample per clock. Checks all 960,000 amplitudes and the sustained rate (last amplitude 20,005 clocks after the first sample) |

`tb/tb_pulse_pkg.sv` holds the stimulus and the reference model. The stimulus
is a pulse train with a deposit in every crossing, a seven-sample pulse shape
on a 50-count pedestal, clipped to 12 bits. The reference model is the
network in double precision with an exact tanh.

Every testbench builds with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/ann_pkg.sv tb/tb_pulse_pkg.sv tb/tb_ann_reconstructor.sv \
    --top-module tb_ann_reconstructor
./obj_dir/Vtb_ann_reconstructor
```

For the unit testbenches, `tb/tb_pulse_pkg.sv` can be left out. For example:
`verilator --binary --timing --assert -y rtl rtl/ann_pkg.sv tb/tb_hidden_layer.sv --top-module tb_hidden_layer`.
The full-size runs take well under a second once built.

## Where this design departs from, or goes beyond, the publication

* **Constants.** The trained weights, biases and scalings are not published.
  The defaults are placeholders (see above), so the reconstruction quality
  reported in the publication (correlation 97.7–98.8 % on its simulated data
  set) cannot be reproduced with them. The testbenches check that the
  hardware computes the network correctly, not how good the network is.
* **Word widths, rounding, saturation** are this design's own (see the
  formats table). The publication only says the model was converted to fixed
  point.
* **One hidden neuron** is read from the matrix dimensions printed in the
  publication's block diagram. If the trained network had more hidden
  neurons, `hidden_layer`, the table ports and `output_layer` would need
  widening.
* **Table range** [−1, 1.2] is taken as the argument range. Clamping outside
  it is this design's choice.
* **Resources.** The publication reports, for one channel, 13 DSP slices,
  4 block RAMs, 695 registers, 1,297 LUTs and 165 MHz on a Virtex-7. This
  RTL was not put through an FPGA flow. It has 21 multipliers per channel,
  counted before any constant-multiplier optimisation: 9 constant gains, 9
  weights, the table address, `LW2` and `gain2`. So its counts will differ.
* **Shared activation table** and the `in_valid` shift strobe are this
  design's own (see above).
* **Not included.** The on-chip memory that replayed the simulated data set
  into the FPGA for validation is not part of the design. The testbenches
  generate their own data instead. The optimal-filtering baseline that the
  publication compares against is not included either.
