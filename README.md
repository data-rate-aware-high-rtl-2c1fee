# Continuous-flow CNN layers sized to their data rate

A CNN accelerator can be built as a pipeline with one dedicated hardware
layer per network layer, with pixels streaming through it without stopping.
Each layer then only needs enough multipliers to keep up with the rate at
which data arrives. That rate differs from layer to layer:

- a stride-2 layer thins the stream out by four;
- a layer with many output channels widens each pixel.

This RTL builds such layers for any input rate, whether a fraction of a
feature per clock or several whole pixels per clock. It does so with three
units:

- the **KPU** (kernel processing unit) computes one K×K window;
- the **MAC unit** adds the KPUs of one output neuron across input features;
- the **FCU** (fully connected unit) does the same for 1×1 and dense layers.

Two integers set a layer's rate:

- `J` is how many input features a unit receives per clock;
- `HN` is how many output neurons it computes one after another.

A layer with `D_IN` input features therefore takes `T = HN·D_IN/J` clocks per
pixel. One unit's weight memory holds `T` configurations, and a counter
selects one of them each clock. When even `J = D_IN` with `HN = 1` is too slow
(several pixels per clock), the layer is widened to `P` pixel lanes, and
each lane gets its own copy of the units.

The top level, `cf_accel_top`, is the stem of MobileNetV2, fed two RGB
pixels (six features) per clock:

- a 3×3 stride-2 convolution from 3 to 32 channels;
- a 3×3 depthwise convolution;
- a 1×1 projection from 32 to 16 channels.

At 224×224 one image takes 25,088 clocks.

## Stream format

All layers use the same stream format:

- Pixels arrive in raster order, and images follow each other with no gap.
- A beat carries `P` pixels: pixel `q` of the stream is on lane `q mod P` in beat `q div P`.
- Within a beat, the `D_IN` features are sent as `G = D_IN/J` groups of `J`. Each group is held for `HN` clocks.
- Lane `i` of group `g` carries feature `i·G + g`.
- Cycles with `en` low are ignored everywhere. A layer may be fed with gaps, which is how a stride-2 layer feeds the next one.
- There is no back-pressure: the design is continuous-flow.

Configuration `c = g·HN + k`, counted from 0 to `T-1` within a beat, selects
the weights for feature group `g` and neuron `k`. A MAC or FCU with index `m`
computes neuron `m·HN + k`.

## The single-pixel KPU (`kpu_tr`)

This is a transposed-form FIR in two dimensions:

- Each input feature is broadcast to all K·K multipliers.
- The products are added along a chain. Between the taps of one kernel row, the partial sum waits one pixel.
- From the last tap of a row to the first tap of the next, it waits `W-K+1` pixels, a line delay.
- So the sum leaving the last tap is the complete window whose bottom-right pixel is the current input.
- Every delay is `T` clocks long per pixel, because `T` configurations share the KPU.

Zero padding works without storing any zeros. Each multiplier has a select
that zeroes its input. A product computed while the input pixel is outside
the window's image area (the left/right wrap of the line, or the row of the
previous or next image) is zeroed. The KPU is only valid where a window
ends; `window_ctrl` says where that is.

## The multi-pixel KPU (`kpu_mp`) and its tap geometry

With `P` pixels per beat, the transposed chain no longer works, because
several windows end in the same clock. Instead, every KPU reads the K·K
pixels of its window directly. They come from one delay line per lane and
input feature (`mp_feature_buffer`), which all KPUs of the layer share.

There are `P` KPU designs, one per lane `a` on which a window can end. For
design `a`, tap `(kr, kc)` lies `off = (K-1-kr)·W + (K-1-kc)` pixels before
the window's last pixel. It is therefore read from:

    lane  = (a - off) mod P
    delay = ceil((off - a) / P) beats

Both values are fixed at elaboration (`cf_pkg::tap_lane`, `tap_delay`). They
become plain wiring into the buffer.

For the 5×5 image with `P = 2` and design 0, this gives:

| tap | lane | delay    |
|-----|------|----------|
| w0  | 0    | 6 beats  |
| w1  | 1    | 6 beats  |
| w2  | 0    | 5 beats  |
| w8  | 0    | 0        |

The multi-pixel KPU then multiplies and adds all K·K taps in one clock.

**Pruning.** With a stride greater than 1, a design on which no valid window
ever ends is not built. The check is `cf_pkg::design_used`, which scans `P`
consecutive images. Pruned designs output zero and have no hardware.

- In the MobileNetV2 stem (224×224, stride 2, `P = 2`), every output window ends on lane 1. Only that design exists.
- A caution: for odd-sized images sent back to back, the lane of a given position alternates between images. In that case both designs stay, even at stride 2. A 5×5 stride-2 layer with `P = 2` needs both.

## Window control (`window_ctrl`)

One counter per layer tracks the configuration phase and the position
`(row, column)` of the pixel on lane 0. From this it derives, for every lane:

- whether an output window ends there (stride and padding included);
- the K·K padding selects of that window;
- the per-tap padding selects of the single-pixel KPU.

With padding `PD`, the window whose bottom-right corner lies past the right
edge is completed only by a pixel of the next row. It is found there, at
column `c < PD`, and mapped back to `(row-1, c+W)`. Windows below the last row
are finished by the first rows of the following image in the same way. A
window mapped into the previous image is only reported once one image has
passed since reset. The end of a stream therefore needs one more image (or
its first `PD` rows) to flush the last windows.

## MAC unit and FCU

`mac_unit` holds the weight ROM of its `J` KPUs. The ROM has one row of `J×K·K`
weights per configuration. The unit does three things:

- it adds the `J` KPU outputs;
- it accumulates over the `G` feature groups through an `HN`-deep feedback
  delay, one slot per neuron in flight;
- it ignores the feedback for group 0.

The result is valid in the last group's configuration of a valid window, and
`y_cfg` tells which neuron it is. In depthwise mode there is no adder: each
KPU is one channel, and the unit passes the `J` sums on.

`fcu` is the same structure for 1×1 convolution and dense layers. It has `J`
multipliers reading the `J` inputs, a ROM of `T` weights each, an adder and the
`HN`-deep feedback. `fc_layer` instantiates `D_OUT/HN` FCUs per pixel lane,
and they all share one configuration counter.

The weights are computed at elaboration from a hash,
`cf_pkg::weight(seed, neuron, feature, tap)`, with values -8..7. No trained
model is included. Replace that function, or the ROM initialisation in
`mac_unit` and `fcu`, to load real weights.

## Choosing `J` and `HN`

`cf_pkg::select_j`, `select_h` and `select_rate_ok` describe the admissible
designs:

- `J` divides `D_IN`;
- `HN` divides `D_OUT`;
- the input rate `J/HN` must be at least the layer's data rate.

The smallest such rate is chosen, and among designs with equal rates the one
with the larger `HN`. These functions are not called by the layers. A layer
takes `J` and `HN` as parameters, so a generator or a user can pick them
with these helpers.

## The stem pipeline (`cf_accel_top`)

```
x[3][2] --L1 conv_layer_mp (3x3, s2, pad 1, 3->32, J=3, HN=1, P=2)
        --requant--> 32 features, every 2nd clock on average
        --L2 conv_layer_sp (3x3 depthwise, pad 1, 112x112, J=32)
        --requant--> L3 fc_layer (1x1, 32->16, J=32) --> y[16], y_valid
```

The requantisation between layers works as follows:

- it applies ReLU;
- it shifts right arithmetically (`SHIFT1`, `SHIFT2`);
- it saturates to 127.

L3 outputs raw 28-bit sums. Activations and weights are 8-bit signed.

From the input clock that completes the receptive field, latency is 2 clocks
in L1, plus 1 register, plus 2 in L2, plus 1 register, plus 1 in L3.

## Where this departs from the source design

- Only the first three layers of MobileNetV2 are assembled. The paper's results cover the whole network. Pooling and classifier layers are absent, and so is a pooling unit.
- Requantisation between layers is this design's own. ReLU6 is approximated by ReLU with saturation.
- The rate difference between L1's output (on average one pixel every 2nd beat, none during odd input rows) and L2 is absorbed by clocking L2 only on valid pixels. No rate-matching buffer is described in the source, and none is used.
- Adders are written as plain sums. The compressor trees of the original are left to synthesis.
- Weights sit in ROM arrays rather than explicit block RAMs.
- The divisibility rules are stated inconsistently in the source text ("j divisible by d_in"). This design follows the equations: `J | D_IN` and `HN | D_OUT`.
- The pruning caution above (odd image sizes) is a correction to the blanket statement that some multi-pixel KPU designs are unnecessary at stride > 1.

## Simulating

Every testbench in `tb/` is self-checking and prints
`TB_RESULT checks=N failures=M`. Run one with Verilator 5:

```
verilator --binary --timing -y rtl -y tb +libext+.sv \
    rtl/cf_pkg.sv tb/tb_conv_layer_mp.sv --top-module tb_conv_layer_mp
./obj_dir/Vtb_conv_layer_mp
```

- Unit testbenches: `tb_kpu_tr`, `tb_kpu_mp`, `tb_mp_feature_buffer`, `tb_window_ctrl`, `tb_mac_unit`, `tb_fcu`, `tb_fc_layer`, `tb_conv_layer_sp`, `tb_conv_layer_mp`, `tb_cf_pkg`.
- The convolution testbenches compare every output window with a direct convolution, and check its clock cycle when no gaps are inserted.
- `tb_cf_accel_top` runs two reduced stems, one with random input gaps.
- `tb_cf_accel_top_full` runs the default 224×224 stem on one image plus a flush image, and checks all 200k output values against a layer-by-layer model. It builds in about 30 s and runs in a few seconds.
