# A neural network whose hidden layers are plain logic

If every activation of a hidden layer is a single bit (the sign of a
batch-normalized sum), the layer is nothing more than a multi-output Boolean
function of the bits of the layer before it. The weights still exist during
training and may take any real value, but once training is over a layer can be
turned into gates: list what each neuron outputs for the inputs it actually
sees, leave every other input combination as a don't-care, minimize, and
synthesize. The resulting hardware reads no weights at all, does no
multiply-accumulate and computes a whole layer in one pass of combinational
logic.

Only the first layer (real-valued pixels in) and the last layer (real-valued
class scores out) still need stored parameters. This RTL implements that
scheme for two networks on 28x28 images: a four-layer perceptron,
784-100-100-100-10, whose two middle layers are logic, and a small
convolutional network whose second convolution is logic (see "The
convolutional network" below). The perceptron:

```
            host writes                 host writes           host writes
               |                           |                       |
        +------v------+            +-------v-------+        +------v------+
        | image buffer|            | FC1 weights   |        | FC4 weights |
        | 784 x fp32  |            | 78,500 x fp32 |        | 1,010 x fp32|
        +------+------+            +-------+-------+        +------+------+
               |                           |                       |
               +-----------+   +-----------+                       |
                           v   v                                   v
                     +---------------+   100 bits  +-------------+   100 bits  +------------------+
   start ----------> | FC1           |------------>| FC2 | FC3    |----------->| FC4              |--> 10 x fp32 scores
                     | fp32 MAC,     |             | logic| logic |            | fp32 add / sub   |
                     | sign          |             | (binary_core)|            | (no multiplier)  |
                     +---------------+             +-------------+             +------------------+
```

* **FC1** (`fc_mac_layer`) multiplies the float pixels by float weights with a
  six-stage multiply-accumulate unit and keeps only the sign of each of the 100
  sums.
* **FC2 and FC3** (`binary_core`, two `logic_layer`s) are pure logic, each one
  stage of a "macro-pipeline" with registers only at its boundaries.
* **FC4** (`fc_addsub_layer`) receives +1/-1 activations, so each product is the
  weight or its negative: the dot product needs a float adder and nothing else.

## From a neuron to gates

A neuron with binary inputs a_j in {0,1}, weights w_j and threshold b outputs
1 when sum_j a_j w_j >= b. Two ways of turning it into logic are provided.

**Enumeration** (`mp_neuron`, `enum_layer`). With few inputs the whole truth
table can be computed. `mp_neuron` does this at elaboration time from its
weight and bias parameters and outputs the table entry selected by its input,
which synthesis then minimizes. Example (the default parameters): weights
1.4, -3.4, 2.8 and threshold 0.61 give the table

| a0 a1 a2 | 000 | 001 | 010 | 011 | 100 | 101 | 110 | 111 |
|----------|-----|-----|-----|-----|-----|-----|-----|-----|
| sum      | 0.0 | 2.8 | -3.4| -0.6| 1.4 | 4.2 | -2.0| 0.8 |
| f        | 0   | 1   | 0   | 0   | 1   | 1   | 0   | 1   |

which minimizes to f = a0·a1' + a0·a2 + a1'·a2: three AND gates, one inverter
and an OR. Classic gates are special cases: AND is weights (1,1) and threshold
1.5, OR is (1,1) and 0.5, NOT is weight -1 and threshold 0, and XOR needs two
layers. `enum_layer` puts several such neurons side by side on shared inputs;
its default is a three-neuron example in which neurons 0 and 2 turn out to be
the same function and neuron 1 is a NAND, so a flattened synthesis shares the
logic. Weights and thresholds are 16-bit integers scaled by 100. Enumeration
grows as 2^N and is only practical for a handful of inputs.

**Covers of incompletely specified functions** (`sop_neuron`, `logic_layer`).
A 100-input neuron cannot be enumerated. Instead, the training set is run
through the trained network; every input pattern a neuron sees goes into its
ON-set or OFF-set according to its output, and all patterns never seen are
don't-cares. A two-level minimizer then finds a small sum of products that
covers the ON-set, avoids the OFF-set and uses the don't-cares freely, and a
multi-level optimizer shares logic between the neurons of a layer. That flow
runs offline. Its result, one cover per neuron, is what the hardware takes:
`sop_neuron` is an OR of cubes, cube k being described by a care mask
`CARE[k]` (which inputs appear in it) and a polarity mask `POL[k]` (the value
each must have). `logic_layer` holds OUT such neurons over IN shared inputs,
with parameters `CARE[n][k]` and `POL[n][k]`.

### The covers in this RTL are placeholders

The trained network and its minimized covers are not available, so
`logic_layer` fills its cover parameters with a **synthetic cover** generated
at elaboration: each neuron has `CUBES` = 16 cubes of `LITS` = 6 literals, and
literal l of cube k of neuron n is input `h % IN` with required value `h[31]`,
where `h = nn_pkg::cover_hash(SEED, n, k, l)`. FC2 uses seed 0x12345678, FC3
0x9ABCDEF0. The synthetic cover gives the layers realistic shape (fan-in,
cube count, switching) and lets the whole chip be simulated, but it is not a
trained classifier, and the gate count of the layers depends entirely on the
real covers. To build a real network, override `CARE` and `POL` of the two
`logic_layer` instances (or give `binary_core` parameters that pass them on)
with the covers your minimizer produced.

## The float layers

All float numbers are IEEE-754 single precision. The arithmetic units are
written for this design with a fixed stage count:

| unit       | stages | behaviour |
|------------|--------|-----------|
| `fp32_mul` | 2 | significand product, then normalize and round |
| `fp32_add` | 4 | order operands, align (guard/round/sticky), add/subtract, normalize and round |
| `fp32_mac` | 6 | `fp32_mul` then `fp32_add`; r = round(round(a·b) + c), not fused |

Rounding is to nearest, ties to even. Subnormal inputs and results are flushed
to zero; an exact zero sum is +0; NaN, inf·0 and inf-inf give 0x7fc00000;
overflow gives infinity. All units accept one operation per clock.

**FC1.** For each of the 100 neurons the accumulator is loaded with the
neuron's bias, then one MAC per input adds x_i·w_ji. The next MAC needs the
previous sum, and only one MAC unit is used, so each MAC costs 8 clocks
(address, issue, 6 stages). The output bit is 1 when the final sum is >= 0
(zero counts as positive) and 0 otherwise. Batch normalization must be folded
into the weights and bias beforehand: for a positive scale, sign(BN(z)) is
sign(z - threshold); for a negative scale, negate the neuron's weights and bias.

**FC4.** Bit 1 means +1 and bit 0 means -1. For each of the 10 outputs the
accumulator starts at the bias; for every input the weight is added, or added
with its sign bit flipped. 6 clocks per input (address, issue, 4 stages). The
scores are the raw sums (no arg-max). Batch normalization is folded likewise.

## The convolutional network

`nullanet_cnn` classifies a 28x28 image with

```
28x28 float --conv1_layer--> 3x3 conv, 10 ch, float MAC   26x26x10
               2x2 max pool, sign                           13x13x10 bits
            --conv2_logic--> 3x3 conv, 10 -> 20 ch, logic  11x11x20 bits
               2x2 max pool                                 5x5x20 = 500 bits
            --fc_addsub_layer--> 500 -> 10, float add/sub   10 scores
```

No padding, stride 1; the 2x2 pooling of the odd 11x11 map drops its last
row and column.

**Pooling and sign commute.** The sign is monotone, so the sign of the
maximum of four sums is the OR of their four signs. `conv1_layer` therefore
keeps only a sign bit per convolution sum and ORs the four of a window; it
never stores a float feature map. It uses one MAC unit exactly like FC1
(8 clocks per MAC): filter `c` tap `k = ky*3+kx` at address `9c + k`, bias of
channel `c` at `9*C1 + c`; output bit `(py*13 + px)*10 + c`. After the sign,
+1/-1 max pooling is again an OR of bits.

**The logic convolution.** The 20 filters of the second convolution see a
3x3x10 = 90-bit patch and produce 20 bits: one 90-input, 20-output
`logic_layer`. `conv_kernel_stage` puts registers on both sides of it
(90 + 20 data register bits, the only storage the kernels need) and
`conv2_logic` slides the window over the 13x13x10 map, one patch per clock,
so the 121 patches take 121 clocks plus two of latency. Patch bit
`(ky*3 + kx)*10 + c` is map bit `((oy+ky)*13 + ox+kx)*10 + c`. Its cover is a
placeholder of the same kind as FC2/FC3 (seed 0x0C0FFEE0).

The last layer is `fc_addsub_layer` with 500 inputs: weight `w[k][i]` at
`k*500 + i`, bias of class `k` at `5000 + k`.

Timing of one image at the defaults:

```
conv1     13·13·10·296 + 1        = 500,241 clocks
conv2     11·11 + 3               =     124
last      10·(6·500 + 2) + 1      =  30,021
total                             = 530,386 clocks
```

Ports: `clk`, `rst_n`, `start`, `busy`, `done`, `score` as for the
perceptron; image writes `img_we/img_waddr[9:0]/img_wdata` (pixel `y*28 + x`),
conv1 filters `wc_we/wc_waddr[6:0]/wc_wdata`, last layer
`wf_we/wf_waddr[12:0]/wf_wdata`.

## The top module `nullanet_top`

`nullanet_top` holds both networks as independent engines that share
nothing; its ports are those of `nullanet_mlp` prefixed `mlp_` and those of
`nullanet_cnn` prefixed `cnn_`, plus `clk` and `rst_n`. Both engines may run
at the same time. Instantiate `nullanet_mlp` or `nullanet_cnn` directly if
only one network is needed.

## Using the perceptron `nullanet_mlp`

Parameters: `N_IN` = 784, `HID` = 100, `N_CLS` = 10, `CUBES` = 16, `LITS` = 6.

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset (controls and valid bits only, memories keep their contents) |
| `img_we`, `img_waddr`, `img_wdata` | in | 1, 10, 32 | write pixel `img_waddr` of the image buffer |
| `w1_we`, `w1_waddr`, `w1_wdata` | in | 1, 17, 32 | FC1 memory: weight w[j][i] at j·784 + i, bias of neuron j at 78,400 + j |
| `w4_we`, `w4_waddr`, `w4_wdata` | in | 1, 10, 32 | FC4 memory: weight w[k][i] at k·100 + i, bias of class k at 1,000 + k |
| `start` | in | 1 | one-clock pulse: classify the image in the buffer; ignored while busy |
| `busy` | out | 1 | high from the clock after start until done |
| `done` | out | 1 | one-clock pulse; `score` is valid from here until the next run ends |
| `score` | out | 10 × 32 | class scores, fp32, `score[k]` for class k |

Timing of one image, from the start pulse to done:

```
FC1       HID·(8·N_IN + 2) + 1   = 627,401 clocks
core      3 register stages + 1  =       4
FC4       N_CLS·(6·HID + 2) + 1  =   6,021
total                            = 633,426 clocks
```

Memories are written through their own ports at any time; writing while a run
is in progress changes that run's result. The FC2/FC3 stage accepts a new
vector every clock; in this top it is used once per image because FC1 is the
bottleneck.

## Files

| file | content |
|------|---------|
| `rtl/nn_pkg.sv` | fp32 type and field struct, special constants, the cover hash |
| `rtl/mp_neuron.sv`, `rtl/enum_layer.sv` | threshold neurons and layers realized by enumeration |
| `rtl/sop_neuron.sv`, `rtl/logic_layer.sv` | sum-of-products neurons and logic layers |
| `rtl/binary_core.sv` | FC2 + FC3 as two registered logic stages |
| `rtl/fp32_mul.sv`, `rtl/fp32_add.sv`, `rtl/fp32_mac.sv` | float units |
| `rtl/param_mem.sv` | synchronous RAM for parameters and the image |
| `rtl/fc_mac_layer.sv`, `rtl/fc_addsub_layer.sv` | first and last layer engines |
| `rtl/nullanet_mlp.sv` | the perceptron |
| `rtl/conv1_layer.sv`, `rtl/conv_kernel_stage.sv`, `rtl/conv2_logic.sv` | float convolution with pooling; logic convolution kernel; sliding window and pooling around it |
| `rtl/nullanet_cnn.sv` | the convolutional network |
| `rtl/nullanet_top.sv` | the top: both networks |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_nullanet_mlp.sv` | perceptron at 49-24-24-24-10, three images |
| `tb/tb_nullanet_cnn.sv` | convolutional network at full size, two images |
| `tb/tb_nullanet_top.sv` | both networks at full size, default parameters, two images each, concurrently |
| `tb/tb_ref_pkg.sv` | reference models: binary64 to binary32 rounding, the cover model |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops by itself (a
watchdog counts a failure if it hangs). With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/nn_pkg.sv tb/tb_ref_pkg.sv tb/tb_nullanet_top.sv --top-module tb_nullanet_top
./obj_dir/Vtb_nullanet_top
```

The full-size run of both networks takes about a minute of simulation on a
desktop machine, most of it in FC1. The testbenches check the float units against binary64
arithmetic rounded to binary32 on thousands of random operands, the logic
layers against an independent model of the cover, and the layers and the top
against real-number references; inputs to the top are chosen (pixels k/256,
weights m/16) so that every float sum is exact and the expected scores are
known bit for bit. The top testbenches also check the cycle counts above and
that FC1 produces both signs, the logic layers both values, FC4 both
additions and subtractions, and that a start while busy is ignored; the
convolutional testbenches also check both poolings against a reference and
that a window was decided by a position other than its first.

## How far to trust it, and where it departs

* Followed: binary activations from a sign function; layers with binary inputs
  and outputs as logic with no parameter storage, one macro-pipeline stage per
  layer and no pipelining inside a layer; float MAC first layer; add/subtract
  last layer; 2-stage multiplier, 4-stage adder, 6-stage unfused MAC; the
  784-100-100-100-10 sizes; the convolutional network with 3x3 convolutions of
  10 and 20 channels, 2x2 max pooling after each, and its second convolution
  as a 90-input, 20-output logic kernel with 110 data register bits. The
  binary core has 300 data register bits plus 3 valid bits.
* Derived: no padding in the convolutions and a 500-to-10 fully connected
  last layer in the convolutional network. These sizes give a MAC count of
  283,640 for the network computed entirely with MACs, which is the published
  figure; with the second convolution as logic the count is 65,840, where
  69,470 was published (the difference is not accounted for).
* Own choices: one MAC unit and one adder, time-multiplexed over all neurons;
  one logic kernel reused for all 121 patches;
  the two networks side by side in one top;
  the memories, their layouts and the host write ports; the valid-only
  hand-over between layers; flush-to-zero float formats; sign(0) = +1; folded
  batch normalization; weights of the enumeration neurons as scaled integers.
* Placeholder: the covers of FC2, FC3 and the logic convolution (see
  above).
* Not included: fixed-point versions of the first and last
  layers; pipelining inside a logic layer; the offline training and logic
  minimization flow.
