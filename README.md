# SmartPix: in-pixel charge digitisation and neural-network pT filtering

Pixel detectors at the High-Luminosity LHC produce far more data than can be
sent off the detector at the 40 MHz bunch-crossing rate. This design moves a
first selection into the readout chip itself. Each pixel digitises its
collected charge with a 2-bit flash ADC. The pixels of a 256-pixel matrix are
then summed into a 16-value charge profile along the local y axis of the
cluster. A small neural network classifies that profile, in the same bunch
crossing, as coming from a high-transverse-momentum (high-pT) track or from a
low-pT track of either charge. Only the 2-bit class needs to leave the chip.
Low-pT clusters can then be dropped at the source.

This RTL models the digital part of a 28 nm prototype chip (two 256-pixel
"superpixels") in synthesizable SystemVerilog. The analog front end is given
as an ideal behavioural model, so the whole chip can be simulated from an
injected test charge to the network's decision and the scan-chain readout.

## Signal chain of one bunch crossing

```
pixInTest step ─► pixel_afe ─► adc_latch ─► thermo_encoder ─► y_projection ─► pt_filter_nn ─► dnn_out[1:0]
 (per pixel,      (3 comparator  (hold while   (3 thermometer    (16 rows x 16     (16-58-3 dense
  C0 / 2xC0)       bits)         BxCLK_ANA=0)   bits -> 0..3)     pixels -> 6 bit)   network, argmax)
                                     │
                                     └─► scan_chain (768 bits, BxCLK, ScanLoad) ─► scan_out
```

Everything after the latches is combinational. No clock is needed between a
pixel's comparator firing and `dnn_out` changing.

**Event clock `bxclk_ana` (BxCLK_ANA).** It sets the ADC's two phases. While
it is 0 the comparators auto-zero: they store their own offset and output 0.
Its rising edge starts a sampling phase. Only charge injected after that edge
counts, because the comparator input is AC-coupled and was just zeroed. While
`bxclk_ana` is 1, comparator *i* is 1 when the preamplifier step reaches
threshold `vth`*i*. With `vth0 < vth1 < vth2` the three bits form a
thermometer code.

**Latches.** The three latches of a pixel are transparent while `bxclk_ana`
is 1. When it falls, they hold the final comparator state. The y-profile and
the class therefore stay valid through the auto-zero phase, until the next
sampling phase begins.

**Pixel code and y-profile.** `thermo_encoder` counts the set bits (0..3).
`y_projection` sums the 16 codes of each row, giving 16 buses of 6 bits. The
largest possible sum, 16 x 3 = 48, fits a 6-bit bus, so no saturation logic
is needed. Pixel *p* sits in row *p*/16 and column *p* mod 16.

**Classifier (`pt_filter_nn`).** The network runs

```
h[o]   = max(0, b1[o] + sum_i w1[o][i] * y_prof[i])     o = 0..57, i = 0..15
s[c]   = b2[c] + sum_o w2[c][o] * h[o]                  c = 0..2
dnn_out = argmax_c s[c]     (ties -> lower c)
```

The arithmetic is full precision in two's complement. The inputs are 6-bit
unsigned. Weights are 4-bit signed and biases 8-bit signed, with each bias
added at the accumulator's LSB. The hidden accumulator is 15 bits and the
output accumulator 25 bits. These widths are chosen so that no input can
overflow them. The output code is:

| `dnn_out` | meaning                       |
|-----------|-------------------------------|
| `00`      | high pT                       |
| `01`      | low pT, negative charge       |
| `10`      | low pT, positive charge       |
| `11`      | invalid (never produced here) |

There is one multiplier per weight: 16x58 + 58x3 = 1102 small multipliers for
each superpixel. This matches the design goal of full parallelism and no added
latency.

**Cost per superpixel.** The storage is 512 configuration flip-flops, 4896
weight and bias flip-flops, 768 scan flip-flops and 768 latches. On top of
that come 256 three-input encoders, 16 adder trees of 16 inputs each, and
the 1102 multipliers with their adder chains.

## Test mode: the scan chain

For characterisation, the raw thermometric bits are read out serially. Each
comparator bit has one scan cell: a two-input mux in front of a flip-flop
clocked by `bxclk` (BxCLK).

- With `scan_load = 1`, the mux takes input 1, the latched bit.
- With `scan_load = 0`, it takes input 0, the neighbouring cell, so the chain
  shifts by one place per rising `bxclk` edge.

Bits leave `scan_out` in the order pix0[0], pix0[1], pix0[2], pix1[0], ...
pix255[2]. pix0[0] is already on `scan_out` after the load edge, so 767
further edges bring out the rest. `scan_in` enters at the far end.
`reset_n` clears the chain asynchronously.

The load edge must fall inside the sampling phase, after the data has
settled and before `bxclk_ana` falls. The testbenches use a 100 ns (10 MHz)
event clock, inject at 20 ns and clock BxCLK at 40 ns.

## Configuration chain

The configuration is one serial shift register per superpixel, clocked by
`config_clk`. It shifts only while `config_load` is 1. Data enters at
`config_in` and leaves at `config_out`:

```
config_in ─► pixel 0 bit 0 ─► pixel 0 bit 1 ─► ... ─► pixel 255 bit 1 ─► network image (4896 bits) ─► config_out
            └────────────── 512 injection selects ──────────────┘
```

- **Injection selects.** `config_pix[p][0]` connects capacitor C0 of pixel
  *p* to the global test line and `config_pix[p][1]` connects 2xC0. A pixel
  therefore receives 0..3 units of test charge from one `pixInTest` step, and
  any cluster shape can be programmed.
- **Network image.** From register bit 0 upward it holds: `w1[o][i]` at
  `(16*o + i)*4`, then `b1[o]` (8 bits each) from bit 3712, then `w2[c][o]`
  at `4176 + (58*c + o)*4`, then `b2[c]` from bit 4872. Each field is
  least-significant bit first.

The whole chain is 5408 bits long. The bit sent first ends in the highest
position, so the image is sent from bit 5407 down to bit 0.

## Pixel front-end model (`pixel_afe`)

This is a behavioural model, not logic. Its `real` ports carry voltages.

- A falling step of `pixInTest` by dV injects Q = dV · n · C0 / q_e
  electrons, where n = `config_pix[0] + 2*config_pix[1]` and C0 = 1.85 fF.
  So 3xC0 = 5.55 fF, and a 0.6 V step gives about 20 ke-.
- The preamplifier gain is 58.5 µV/e-. The charge is clipped at 8000 e-,
  where the real preamplifier saturates.
- A rising step injects nothing.

With the thresholds at 80/160/320 mV and a 0.2 V step, one injection unit
gives code 1, two give code 2 and three give code 3.

Noise, threshold dispersion, the leakage-compensation loop and the small
charge error of the sampling switch are not modelled. Nor is the difference
between the two superpixel variants, which have a differential and a
single-ended ADC respectively. The model is therefore exact where the real
chip is statistical. It is there to drive the digital logic, not to predict
analog performance. Replace it with a noisier model if the network's
robustness to noise is what you want to study.

## Chip top (`smartpix_asic`)

The top has `N_SP = 2` superpixels. They share the clocks, `reset_n`,
`scan_load`, `config_clk`/`config_load`, the global `pixInTest` line and the
three threshold lines. Each superpixel has its own `config_in`/`config_out`,
`scan_in`/`scan_out`, 16-bus `y_prof` output and `dnn_out`. The y-profile is
a port because the test system reads it out together with the class.

The current-bias input and the bias mirror are not modelled, because they
have no logic function.

## Where this RTL departs from, or goes beyond, the published description

The following are choices made here because the description is silent:

- **Network quantisation.** The weight width (4 bits), bias width (8 bits),
  bias scaling, full-precision accumulators and the absence of any
  requantisation after the ReLU are choices made here. The real network was
  generated by a high-level-synthesis flow from a quantised model whose
  number formats are not given. Change `W_W`/`B_W` in `smartpix_pkg` to
  match a trained model.
- **Weight programming.** The weights are said to be programmable, but the
  mechanism is not given. Appending them to the pixel configuration chain is
  this design's choice.
- **Latch enable and auto-zero output.** The latch enable (`bxclk_ana`) and
  the comparator output of 0 during auto-zero are inferred. The source
  labels BxCLK_ANA = 0 as auto-zero and 1 as sampling, and one sentence of
  it places the start of auto-zero at the rising edge instead. The labels
  were followed.
- **Pixel grouping.** The matrix is described both as 32 x 8 and, in the
  network diagram, as rows 0..15 by columns 0..15. The summation follows the
  16 x 16 labelling.
- **Ordering and control details.** The chain order across pixels, the
  gating of `config_clk` by `config_load` (here a shift enable), the
  asynchronous `reset_n`, the tie rule of the argmax and the handling of
  non-thermometric codes (bit count) are choices made here.
- **Per-superpixel pins.** Separate configuration, scan and output pins for
  the two superpixels are assumed.

The combinational network of 1102 multipliers is not checked against any
timing target. The source chip was tested at 10 MHz and designed for 40 MHz
in 28 nm. An FPGA or another process may need pipeline registers added in
`pt_filter_nn`.

## Files

| file | contents |
|------|----------|
| `rtl/smartpix_pkg.sv` | sizes, widths and the `dnn_out_t` code |
| `rtl/pixel_afe.sv` | behavioural pixel front end (injection, preamp, 3 comparators) |
| `rtl/adc_latch.sv` | comparator latches |
| `rtl/thermo_encoder.sv` | thermometer-to-binary pixel code |
| `rtl/pixel_config_reg.sv` | injection-select shift register |
| `rtl/scan_chain.sv` | 768-bit test readout |
| `rtl/y_projection.sv` | 16 row sums |
| `rtl/nn_dense.sv`, `nn_relu.sv`, `nn_argmax.sv` | network layers |
| `rtl/pt_filter_nn.sv` | the 16-58-3 classifier |
| `rtl/nn_weight_reg.sv` | weight and bias register |
| `rtl/superpixel.sv` | one 256-pixel matrix with its logic |
| `rtl/smartpix_asic.sv` | chip top, two superpixels |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_nn_ref_pkg.sv` holds the integer reference network |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. With
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/smartpix_pkg.sv tb/tb_nn_ref_pkg.sv tb/tb_smartpix_asic.sv \
    --top-module tb_smartpix_asic -o sim
./obj_dir/sim
```

Substitute any other `tb_*.sv` and its module name.

- `tb_smartpix_asic` runs the complete chip at its default size in a few
  seconds. It programs random clusters and random weights, injects charge,
  checks every y-profile bus and the class against the integer model, and
  reads all 768 scan bits of both superpixels. It also injects charge during
  auto-zero and checks that it is ignored.
- `tb_superpixel` does the same for a single matrix.

- `tb_workload_thresholds` repeats the published evaluation runs as far as
  they can be repeated without the trained weights. It pushes 10,000
  cluster-like profiles through the classifier and compares each one with
  the integer model. It then pulses programmed clusters at six step
  amplitudes under the three threshold sets used on the chip:
  [80, 160, 320] mV, [400, 1600, 2400] e- and [1000, 1600, 2400] e-, the
  last two converted at 58.5 µV/e-.

The weights in these tests are random, not a trained model. The tests
therefore show that the logic computes the network exactly. They say nothing
about classification accuracy.
