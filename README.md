# A smart super-pixel: filtering pixel clusters by momentum on the sensor

At a 40 MHz collider, a finely segmented pixel detector produces far more data
than can be sent off the detector. Most of the hits come from low-momentum
particles that are of little use to physics analyses. A charged particle curls
in the magnetic field. At low transverse momentum (pT) it crosses the sensor at
a steep angle in the bending plane. It then leaves a cluster that is long along
the sensor's y axis, with a shape that also shows the sign of its charge. A
small neural network can read that shape and decide, in the pixel matrix
itself and within one bunch crossing, whether a cluster is worth reading out.

This repository holds synthesizable SystemVerilog for one such *super-pixel*:
a 16 x 16 patch of sensor pixels with its readout electronics. Each pixel's
charge goes through a 2-bit flash ADC. The codes are summed along each sensor
row into a 16-bin *y-profile*. A fully parallel network,
Dense(16x58) - ReLU - Dense(58x3) - Argmax, gives each cluster one of three
labels:

| class | code | meaning | action |
|---|---|---|---|
| `CLS_POS_LOW` | 0 | positive particle, pT < 200 MeV | reject |
| `CLS_NEG_LOW` | 1 | negative particle, pT < 200 MeV | reject |
| `CLS_HIGH`    | 2 | pT > 200 MeV | keep (`accept` = 1) |

The weights can be reprogrammed through a serial chain. So the same silicon
can be retrained for where it sits on the detector, or for radiation damage.

The design follows a published study of on-sensor cluster filtering in 28 nm
CMOS. In that study the network itself was produced by a high-level-synthesis
flow. Here everything is written directly as RTL. The layer sizes, bit widths,
ADC thresholds and pixel mapping are the published ones. The points the
publication leaves open are marked below as choices of this implementation,
above all the fixed-point binary points and the configuration protocol.

## Geometry: sensor pixels, ROIC pixels and islands

This is the part that is easiest to get wrong when connecting the design.

* **Sensor pixels** are 50 um in x by 12.5 um in y. The magnetic field points
  along x, so tracks bend in the y-z plane. The super-pixel is 16 sensor rows
  (y) by 16 sensor columns (x), 800 um x 200 um.
* **ROIC pixels** (readout-chip pixels) are 25 um x 25 um. There is one per
  sensor pixel, 256 in all.
* A **2x2 island** of ROIC pixels covers 50 um x 50 um, which is *one sensor
  column by four sensor rows*. The four analog front ends sit together in the
  middle of the island, and the digital logic surrounds them. The ROIC pixels
  are labelled A, B, C, D. A and D form the first ROIC row, B and C the second.
  They connect to sensor pixels 1, 2, 3, 4 like this:

| ROIC pixel | A | D | B | C |
|---|---|---|---|---|
| sensor pixel of the island | 1 | 2 | 3 | 4 |

The super-pixel is therefore 4 x 16 islands, or 8 x 32 ROIC pixels. The top
module takes the charge in ROIC order, `roic_charge[r][c]` with `r` in 0..7 and
`c` in 0..31. Island `(iy, ix)` holds

    A = (2iy, 2ix)    D = (2iy, 2ix+1)
    B = (2iy+1, 2ix)  C = (2iy+1, 2ix+1)

and serves sensor rows `4iy .. 4iy+3` of sensor column `ix`. Sensor pixel 1
is the lowest of the four rows.

The published text calls the remapped matrix "4 x 32" front-end pixels. That
is 128, not 256, so it cannot be one front end per sensor pixel. This design
keeps the one-to-one mapping, which the island description requires. Which end
of an island counts as "pixel 1" is also this design's choice.

## Digitization: a 2-bit flash ADC per pixel

Each ROIC pixel has a charge-sensitive preamplifier and three auto-zero
comparators. Together they make a flash ADC that converts in every 25 ns bunch
crossing. A time-over-threshold ADC would need several clocks, so it cannot be
used here. The thresholds give these codes:

| code | collected charge (electrons) |
|---|---|
| 00 | < 400 (the noise threshold) |
| 01 | 400 - 1600 |
| 10 | 1600 - 2400 |
| 11 | > 2400 |

`pixel_afe` is a **behavioural model** of the analog part. It compares an
integer charge with the three thresholds (parameters `THR0..THR2`) and outputs
a thermometer code. A charge exactly on a threshold counts as the upper code.
`flash_adc_encoder` is the digital part: it samples the comparators on each
clock edge and counts how many fired. Counting, rather than decoding the
thermometer code, keeps a bubble (an upper comparator firing without a lower
one) from producing a wild code. This is a choice of this implementation.

To try the alternative 2-bit mappings from the study, change the threshold
parameters. The mapping with finer low-charge bins uses 400 / 800 / 1200; the
coarser one uses 400 / 2500 / 5000. A 3- or 4-bit ADC would need wider codes
throughout the design.

## The y-profile

`row_sum` adds the 16 ADC codes of one sensor row, so each y-profile bin is at
most 16 x 3 = 48 and fits in 6 bits. The cluster's extent along x is thrown
away. The study found that x carries little information about pT, because it is
the direction along the magnetic field. The simulated clusters used to train the
network span 13 rows. In training, their profiles are padded with zeros to 16
bins. In hardware all 16 rows are summed, and the network always sees 16 bins.

## The network and its number formats

`momentum_classifier` is purely combinational: one multiplier per weight, 1102
multipliers in all. It finishes within the bunch crossing.

| stage | size | values | format in this design |
|---|---|---|---|
| input | 16 | y-profile | unsigned 6-bit integer |
| Dense 1 (batch norm folded in) | 16 x 58 weights, 58 biases | 4-bit | signed, 3 fraction bits: -1 .. +0.875 in steps of 1/8 |
| Dense 1 sums | 58 | | signed 16-bit, 3 fraction bits |
| ReLU | 58 | 8-bit | unsigned, 3 fraction bits: 0 .. 31.875 |
| Dense 2 | 58 x 3 weights, 3 biases | 4-bit | signed, 3 fraction bits |
| Dense 2 scores | 3 | | signed 19-bit, 6 fraction bits |
| Argmax | 1 | 2-bit class | lowest index wins a tie |

That is 1163 trainable parameters. The published model gives only the total
width of each quantity (`<4>`, `<8>`, `<6>`, `<2>`), not where the binary point
sits. The fraction-bit counts above are this design's choice. They are set as
constants in `smart_pixel_pkg` (`W_FRAC`, `ACT_FRAC`), and `qdense` and `qrelu`
take them as parameters. A weight set trained with another binary point needs
these constants changed to match. Otherwise its scores are scaled wrongly.

How the arithmetic is sized:

* The accumulators never overflow. Each product gets the sum of the operand
  widths, and the adder tree grows by `clog2(N_IN+1)` bits, counting the bias.
  This is the conservative, simulation-free sizing the study used. The bias is
  shifted up to the accumulator's binary point before it is added.
* The ReLU sets negative sums to 0. It drops any fraction bits the activation
  does not keep, rounding toward minus infinity; with the default binary points
  none are dropped. It saturates at 255 (31.875). Truncation and saturation are
  choices of this implementation.
* The argmax stands in for the softmax of the trained model. The largest score
  is the class, and no probabilities are computed.
* Batch normalization is not a separate circuit. It must be folded into the
  first layer's weights and biases before they are loaded.

## Weight storage and reconfiguration

`config_chain` stores all 4652 weight and bias bits in one chain of
flip-flops:

| field | size | bit offset of element | element |
|---|---|---|---|
| `w1[o][i]` | 3712 bits | `4*(o*16 + i)` | neuron o, input i |
| `b1[o]` | 232 bits | `3712 + 4*o` | |
| `w2[c][h]` | 696 bits | `3944 + 4*(c*58 + h)` | class c, hidden h |
| `b2[c]` | 12 bits | `4640 + 4*c` | |

Each element is two's complement with its least significant bit at the lower
offset. To load a word `V`, hold `cfg_shift` high for 4652 clocks and present
`V[4651]` first and `V[0]` last on `cfg_in`. `cfg_out` is the top bit of the
chain. While loading, it returns the previous word, MSB first, so the old
weights can be read back, and so super-pixels can be daisy-chained from
`cfg_out` to the next `cfg_in`. The chain has no reset: the weights are
expected to be loaded once after power-up. A one-bit serial port, this field
order and the absence of reset are choices of this implementation. The
published design specifies only the four fields, their sizes, and a
configuration input and output.

While the chain is shifting, the network sees a mix of old and new weights. The
top module then holds `valid` low, from the first shifting clock until one clock
after the last.

## Timing

Everything runs on one 40 MHz clock, with one cluster per bunch crossing.

    edge n    : ADC registers sample the comparators (charge of crossing n)
    n .. n+1  : row sums and network settle (combinational)
    edge n+1  : cls, accept, score registered for crossing n

So the latency is one clock, and a new result arrives every clock. `rst_n` is
asynchronous and active low. It clears the ADC registers and the outputs, but
not the weights.

## Module hierarchy

    smart_pixel_top
    ├── pixel_afe            x256  behavioural analog front end
    ├── roic_island          x64   4 x flash_adc_encoder + A,D,B,C -> 1,2,3,4 mapping
    ├── row_sum              x16   y-profile bins
    ├── config_chain               4652-bit weight chain
    └── momentum_classifier
        ├── qdense  (16 -> 58)
        ├── qrelu   (58)
        ├── qdense  (58 -> 3)
        └── argmax  (3)

`smart_pixel_pkg` holds the shared sizes, widths, fixed-point constants and the
class enumeration. Every file in `rtl/` starts with a description of its
interface and timing.

## Simulating

Each testbench in `tb/` checks itself. It prints
`TB_RESULT checks=N failures=M` and stops. A watchdog ends it with a failure if
it hangs. With Verilator 5:

    verilator --binary --timing --assert --top-module tb_smart_pixel_top \
        -y rtl -y tb +libext+.sv -Irtl \
        rtl/smart_pixel_pkg.sv tb/tb_nn_ref_pkg.sv tb/tb_smart_pixel_top.sv
    ./obj_dir/Vtb_smart_pixel_top

Replace the testbench name to run any other. `tb_nn_ref_pkg` is a plain integer
model of the ADC and the network. It is written separately from the RTL, and
the testbenches compare against it.

| testbench | what it shows |
|---|---|
| `tb_pixel_afe` | thresholds, including charges exactly on each boundary |
| `tb_flash_adc_encoder` | all comparator patterns, bubbles included; one-clock sampling; reset |
| `tb_roic_island` | the A,D,B,C -> 1,2,3,4 mapping with a different code on every pixel |
| `tb_row_sum` | random rows, the empty row and the full row (48) |
| `tb_config_chain` | every field after a serial load; load length of 4652 clocks; hold; readback |
| `tb_qdense` | both layer shapes, random and extreme weights, exact sums |
| `tb_qrelu` | clipping, saturation and truncation, for two binary points |
| `tb_argmax` | random scores, ties, each winner |
| `tb_momentum_classifier` | 1000 random y-profiles over 20 random weight sets: exact scores and class |
| `tb_smart_pixel_top` | full-size end to end, described below |
| `tb_workload_cluster_filter` | the filtering task on track-like clusters, region by region, described below |

`tb_smart_pixel_top` runs the top at its default size. It resets the design and
loads a weight set serially. It then streams 300 track-like clusters, one per
crossing, each defined in sensor coordinates and placed on the ROIC pixels by
the island mapping. Next it reloads a second weight set, checks that the first
comes back out of `cfg_out`, and streams 300 more clusters. Each result is
checked exactly one clock after its sampling edge: class, `accept`, `valid` and
all three scores. The testbench also counts how often each mechanism occurred,
and counts a failure for any that never did. The mechanisms are: all three
classes, accept and reject, ReLU clipping and saturation, all four ADC codes, a
full y-profile bin, two loads, a readback, and `valid` held low during a load.
The run takes well under a second.

`tb_workload_cluster_filter` runs the filtering task itself at full size. It
generates pion clusters from the track geometry: a sensor 100 um thick at a
radius of 30 mm in a 3.8 T field, with pT spread log-uniformly from 0.1 to
10 GeV, both charges, and an assumed Lorentz angle with tan = 0.3. The crossing
point is spread over the central 3 x 3 pixels. The test covers three y0
regions of the module: the two edges and the centre. For each region it loads a
hand-built weight set that keeps clusters whose y-size falls in a window around
the size of a straight track. This is a cluster-size filter, the simplest
region-specific network the hardware can express. Every result is checked bit
for bit against the reference model. The test requires acceptance above 2 GeV
to exceed acceptance below 200 MeV. A typical run keeps about 89% of clusters
above 2 GeV and rejects about a third of those below 200 MeV.

The weights in these tests are hand-built or random, and the clusters are
synthetic. The
trained weights and the simulated cluster data of the study are not part of
this repository. So the tests show that the hardware computes the network
exactly as specified, bit for bit. They do not reproduce the study's physics
results, such as its signal efficiency for pT > 2 GeV or its estimated
54-75% reduction in bandwidth.

## What the design can hold

| configuration | fits? |
|---|---|
| the final network: 16 inputs, 58 hidden, 3 outputs, 4-bit weights, 8-bit activations | yes, exactly (4652 configuration bits) |
| one weight set per y0 region of the detector | yes: each super-pixel holds one set, loaded for its position |
| the study's simulated cluster window, 13 rows x 21 columns | rows yes; only 16 of the 21 columns are summed, which affects only very wide clusters |
| alternative 2-bit ADC mappings | yes, through the front-end threshold parameters |
| 3- or 4-bit ADC | no: codes, row sums and first-layer inputs are sized for 2 bits |
| larger explored networks (60 or 64 hidden, 5-bit weights, 10-bit activations, the 128-neuron baseline with a y0 input and softmax) | no: the sizes are parameters of the modules, but the package constants and storage are set for the final network |
| the cluster-size-only and time-sliced (CNN) models | no: different inputs and structure |

## Departures and limits

* The analog front end is a behavioural model: ideal comparators, with no
  shaping, noise or auto-zero phases. The whole top module is synthesizable
  only because that model is just three constant comparisons. In silicon those
  are analog circuits.
* Fixed-point binary points, ReLU rounding and saturation, argmax tie-breaking,
  the ADC encoding, the configuration protocol, reset behaviour, the output
  register, `valid`, `accept` and the registered `score` outputs are choices
  of this implementation.
* Readout of accepted clusters, and how a cluster is found and centred in the
  super-pixel, are not part of the design. The same goes for arbitration when
  two clusters overlap. `accept` is the hook for that logic. The study's
  bandwidth estimate assumes that single-pixel clusters are dropped outright.
  No separate circuit for that is built here; the network sees such clusters
  like any other.
* The physical implementation (about 889 um x 222 um, about 300 uW in 28 nm
  CMOS) is not represented.
