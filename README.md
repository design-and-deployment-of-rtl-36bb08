# A fixed-latency neural network for displaced-muon pT and d0

Muons from the decay of long-lived particles do not point back to the
collision point. A momentum estimator trained only on prompt muons, like the
boosted decision tree used for ordinary muons in the CMS Endcap Muon Track
Finder (EMTF), loses accuracy quickly once the track's transverse impact
parameter d0 exceeds about 20 cm. The design here is a small fully connected
neural network that runs next to that estimator and measures, for every
endcap muon track, two quantities: the transverse momentum pT without the
assumption that the muon came from the collision point, and |d0| itself.
It has to fit into the roughly 100 ns that the existing momentum stage
already uses, so it is fully pipelined and accepts a new track every clock.

This RTL follows the network described in "Design and deployment of a fast
neural network for measuring the properties of muons originating from
displaced vertices in the CMS Endcap Muon Track Finder" (CMS
Collaboration, EuCAIFCon 2025): its layer structure, its 29 inputs, its
two-branch "stitched" layout and its fixed-latency wrapper. The published
description stops at that level. Number formats, clock, word layouts,
activation functions and all trained constants are not published; the
choices made here are listed in [Departures and open points](#departures-and-open-points).

## The network

```
                 29 raw track features (13-bit numbers)
                               |
                      input conversion            1 clock
                               |
                  batch normalisation (shared)    1 clock
                 /                          \
        dense 29->10, ReLU            dense 29->10, ReLU     2 clocks
        dense 10->8,  ReLU            dense 10->8,  ReLU     2 clocks
        dense  8->1,  linear          dense  8->1,  linear   2 clocks
                 |                           |
        output conversion             output conversion      1 clock
                 |                           |
                pT                         |d0|
                               |
                       delay to LATENCY = 10 clocks
```

The features describe one track: its polar angle, the differences in
azimuth and polar angle between the stubs (detector hits) that make up the
track with their signs, and the bending measured at each stub. Computing
them is the job of the track finder upstream and is not part of this RTL.

The two branches were trained as separate models, one for pT and one for
d0, each with 19 nodes. For the hardware they are run as one model. Two
independent branches are exactly a single network whose second and third
weight matrices are block diagonal, so the RTL simply instantiates the
branch twice on the same normalised inputs.

Batch normalisation at inference time is a per-feature affine map. With the
trained mean, variance, gamma and beta it folds into

    scale = gamma / sqrt(var + eps),   bias = beta - mean * scale,
    y_i   = x_i * scale_i + bias_i

and these folded `scale` and `bias` values are what the hardware takes.

## Arithmetic

This is the part to read before loading real coefficients: a model
exported from floating point only reproduces its results if it is quantised
to exactly these formats.

| quantity | format | range |
|---|---|---|
| raw features | signed 13 bits, 4 fractional | -256 .. +255.94 |
| activations, biases, BN bias | signed 16 bits, 8 fractional (`ap_fixed<16,8>`) | -128 .. +127.996 |
| weights, BN scale | signed 16 bits, 10 fractional (`ap_fixed<16,6>`) | -32 .. +31.999 |
| products and accumulators | signed 32 bits, 18 fractional | wraps |
| output words | unsigned 8 bits, 1 fractional | 0 .. 127.5 |

Each stage works as follows.

* **Input conversion** (`input_conv`): the raw value is shifted to 8
  fractional bits and saturated to 16 bits. Any feature with magnitude of
  128 or more in network units (|raw| of 2048 or more) saturates and raises
  the track's `in_sat` flag.
* **Batch normalisation** (`batch_norm`): the 32-bit product `x * scale` is
  shifted right by 10 (truncation toward minus infinity), the bias added,
  and the sum saturated to 16 bits.
* **Dense layer** (`dense_layer`): the bias, shifted left by 10 into the
  product format, and all products are summed in a 32-bit accumulator that
  wraps on overflow, as an HLS fixed-point accumulator of that width does.
  The sum is shifted right by 10, saturated to 16 bits, and passed through
  ReLU (negative values become 0) in the hidden layers. The output nodes
  are linear.
* **Output conversion** (`output_conv`): the network value is rounded to
  the nearest half unit, halves rounded up. Negative results become 0 and
  raise a `lo` flag, results above 127.5 become 255 and raise a `hi` flag.
  The pT word thus has a 0.5 GeV LSB and the d0 word a 0.5 cm LSB, assuming
  the model was trained with targets in GeV and cm.

The network unit range of +-128 was chosen so that the outputs can cover
the 0 to 120 GeV and 0 to 120 cm over which the model was validated. The
32-bit accumulator is wide enough that it only wraps for inputs and weights
far outside what a trained model produces; narrowing it (the published
implementation reduced accumulator widths to save logic) is a matter of
changing `ACC_W` and re-validating.

## Pipeline and fixed latency

Every stage is registered and fully parallel: all 785 multiplications of a
track (29 for batch normalisation, 378 per branch) happen in the same
clock. Each dense layer takes two clocks, one for the products and one for
the sum, requantisation and activation. The pipeline is 9 clocks deep. The
wrapper adds a delay line so that a result leaves exactly `LATENCY` clocks
after its track entered, whatever the data, which is what a trigger with a
fixed latency budget needs. The default `LATENCY = 10` corresponds to the
83 ns reported for the deployed network if the logic runs at 120 MHz (three
clocks per 25 ns bunch crossing); at that clock the 9-clock pipeline alone
would take 75 ns. `LATENCY` may be raised to any value of 9 or more.

```
clock      0      1      2 ...      9      10
valid_i    1
raw_i      track
valid_o                                    1
pt_o,d0_o                                  result
```

There is no back-pressure and no stall: a track may be presented every
clock, with `valid_i` low on idle clocks. Reset (`rst_n` low, synchronous)
clears the valid bits along the pipeline, so tracks in flight at reset are
dropped; the data registers are not reset.

## Top-level interface

`emtf_displaced_nn` (all types from `dnn_pkg`):

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | synchronous reset, active low |
| `valid_i` | in | 1 | a track is presented this clock |
| `raw_i` | in | 29 x 13 | the track's raw features, `raw_t [28:0]` |
| `coef_i` | in | `nn_coef_t` | all trained constants |
| `valid_o` | out | 1 | a result is presented, `LATENCY` clocks after its track |
| `pt_o` | out | 8 | pT, 0.5 GeV per LSB |
| `d0_o` | out | 8 | magnitude of d0, 0.5 cm per LSB |
| `flags_o` | out | `nn_flags_t` | `in_sat`, `pt_lo`, `pt_hi`, `d0_lo`, `d0_hi` |

The trained constants are not built into this RTL because they are not
published. They come in through `coef_i`, a packed struct:

```
nn_coef_t     { bn_scale[29], bn_bias[29], branch_coef_t pt, branch_coef_t d0 }
branch_coef_t { w1[10][29], b1[10], w2[8][10], b2[8], w3[1][8], b3[1] }
```

`w1[j][i]` is the weight from input `i` to node `j`. Weights and BN scales
use the weight format, biases the data format. `coef_i` must be stable
while tracks are in the pipeline. For a production build, tie `coef_i` to a
constant of the trained values (synthesis then turns most multipliers into
constant multiplications) or drive it from configuration registers.

## Files

| file | content |
|---|---|
| `rtl/dnn_pkg.sv` | sizes, number formats, latency, coefficient and flag types |
| `rtl/input_conv.sv` | raw feature to fixed-point conversion with saturation |
| `rtl/batch_norm.sv` | folded batch normalisation |
| `rtl/dense_layer.sv` | generic fully parallel dense layer with optional ReLU |
| `rtl/nn_branch.sv` | one 29-10-8-1 branch |
| `rtl/displaced_nn.sv` | batch normalisation plus the pT and d0 branches |
| `rtl/output_conv.sv` | rounding and clipping to the output words |
| `rtl/emtf_displaced_nn.sv` | top level: conversions, network, fixed-latency delay |
| `tb/nn_ref_pkg.sv` | bit-accurate reference model and random coefficient generator |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Verification

Each testbench drives its module with random data at one input per clock,
with random idle clocks, and compares every output bit for bit with a
reference written independently in `tb/nn_ref_pkg.sv` using plain 64-bit
integer arithmetic. Each also checks the latency in clocks and counts the
corner cases it is meant to reach (saturation, ReLU clipping, accumulator
wrap-around, rounding of exact halves, low and high output clipping) and
fails if one never occurred. `tb_emtf_displaced_nn` runs the whole design
at its default parameters: six coefficient sets, back-to-back tracks and
idle clocks, and a reset with tracks in flight. Every testbench ends with a
line `TB_RESULT checks=N failures=M`.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl \
    rtl/dnn_pkg.sv tb/nn_ref_pkg.sv tb/tb_emtf_displaced_nn.sv \
    --top-module tb_emtf_displaced_nn
./obj_dir/Vtb_emtf_displaced_nn
```

Replace `emtf_displaced_nn` with any other module name to run its
testbench. All of them finish in well under a second. The testbenches
mix integer widths freely, so Verilator prints width warnings for them;
`-Wno-fatal` keeps those from stopping the build.

What the tests do not show: that the network reproduces the published
physics performance. That needs the trained weights and the simulated
muon samples, neither of which is public.

## Departures and open points

Taken from the published design: 29 inputs; batch normalisation; two
branches of three dense layers with 10, 8 and 1 nodes; pT and d0 as the two
outputs; the branches run as one stitched model; a wrapper with fixed
latency that converts inputs and outputs; a latency of 83 ns.

Chosen here, because the publication does not give them:

* the clock (120 MHz) and therefore `LATENCY = 10`;
* all number formats, the rounding modes, saturation of layer outputs and
  the 32-bit wrapping accumulator;
* ReLU after the hidden layers and linear outputs;
* the raw feature width and scaling (13 bits, 4 fractional), and the
  output words (8 bits, 0.5 LSB, negatives to 0);
* the status flags;
* a coefficient input port instead of built-in constants;
* one track per clock per instance; how many instances a track finder
  board needs is not stated.

Size: fully parallel, the design needs 785 16 x 16 multipliers. The
published implementation raised DSP usage of the Virtex-7 device by 12
percentage points; even on a Virtex-7 with 3,600 DSP slices that is about
430 slices, fewer than 785.
With constant weights many multiplications become small or vanish (zero or
power-of-two weights), and HLS tools map some of them to logic, so the two
numbers are not directly comparable.
