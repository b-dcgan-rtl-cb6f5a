# A binarized DCGAN generator in SystemVerilog

A DCGAN generator turns a random noise vector and a class label into an
image. This design computes the generator of *B-DCGAN* (Terada and Shouno,
"B-DCGAN: Evaluation of Binarized DCGAN for FPGA") with almost no
multipliers:

- every weight of the hidden layers is +1 or -1 and is stored as one bit;
- every hidden activation is +1 or -1 and is stored as one bit;
- the network inputs are small integers.

Each hidden layer therefore reduces to integer additions and subtractions
followed by one comparison per neuron. Only the last layer keeps
multi-bit ("real-valued") weights. The authors found that binarizing that
layer too ruins the image quality.

The configuration built here is the one the authors recommend for MNIST,
their scenario **S3-1**:

- integer inputs with scale A = 1;
- all four fully connected layers binarized;
- the first transposed convolution binarized;
- a real-valued last transposed convolution, followed by a sigmoid.

The output is one 28x28 image with 8-bit pixels.

The authors generated their FPGA circuit with a high-level synthesis tool.
They publish the network, the arithmetic and the parameter sizes, but not
the circuit. So the whole micro-architecture below is this design's own:
the engines, the schedule, the memories and the interface. Everything
marked *published* comes from the paper.

## 1. The network

| # | layer | input | output | weights | activation |
|---|-------|-------|--------|---------|------------|
| – | input quantizer | z (100 reals), y (10, one-hot) | zi, yi (110 integers) | – | – |
| 1 | B-FC | [zi ; yi] 110 | 600 | 110x600 bits | threshold, ±1 |
| 2 | B-FC | 600 | 600 | 600x600 bits | threshold, ±1 |
| 3 | B-FC | 600 | 600 | 600x600 bits | threshold, ±1 |
| 4 | B-FC | [a ; yi] 610 | 3136 = 64x7x7 | 610x3136 bits | threshold, ±1 |
| 5 | B-Deconv 5x5, stride 2 | [a ; yi] 74x7x7 | 64x14x14 | 64x74x5x5 bits | threshold, ±1 |
| 6 | Deconv 5x5, stride 2 | [a ; yi] 74x14x14 | 1x28x28 | 74x5x5 fixed-point | sigmoid |

The published sizes are:

- 100 noise inputs and 10 classes;
- 600 units in each of the first three FC layers;
- 64x7x7 units in the fourth FC layer;
- 5x5 kernels;
- 64 filters in the first transposed convolution and one in the second.

The class label is appended as extra inputs in four places:

- to the input of FC1;
- to the input of FC4;
- to the input of each transposed convolution, as 10 extra channels that
  hold the same value at every pixel.

The published figure gives the map sides 7, 14 and 28 but no stride or
padding. Stride 2 with padding 2 is the only usual choice that produces
those sides from a 5x5 kernel, so this design uses it.

## 2. Number formats

**Integer inputs.** The generator computes zi = round(A·z) and yi = A·y,
with A = 2^(H-1) − 1. Both results fit in H signed bits. The published
experiments use A = 1, 127 and 4095, which means H = 2, 8 and 13. The
main configuration uses A = 1: each zi is −1, 0 or +1, and each yi is 0
or 1. In this design z arrives as signed Q1.15 fixed point, and halves are
rounded up. Both are this design's choices.

**Binary values.** A weight or activation bit of 1 means +1, and a bit of
0 means −1. An input x meets a weight bit w as `w ? +x : −x`, so no
multiplier is needed.

**Batch normalization folded into a threshold.** The trained batch
normalization is γ·(a − μ)·i + B. Followed by a sign, it is equivalent to
the single comparison a ≥ τ, with τ = round(μ − B/(γ·i)). The thresholds
are computed off line, one per neuron or per output channel, and loaded
as signed ACC_W-bit integers. The equivalence assumes γ·i > 0. For a
neuron with γ·i < 0, the comparison would have to be reversed, which this
design does not support.

**Real-valued last layer.** Deconv-2 weights are signed Q4.12 numbers of
16 bits. The sum of a pixel is kept in 40 bits with 12 fraction bits.
These formats are this design's choices. The sigmoid uses the
piecewise-linear "PLAN" approximation, which needs only shifts and adds:

| \|x\| | sigmoid(\|x\|) |
|-------|----------------|
| ≥ 5 | 1 |
| 2.375 – 5 | \|x\|/32 + 0.84375 |
| 1 – 2.375 | \|x\|/8 + 0.625 |
| < 1 | \|x\|/4 + 0.5 |

For negative x the unit uses sigmoid(x) = 1 − sigmoid(|x|). The pixel is
min(255, ⌊256·sigmoid⌋). Its error against the true logistic function is
below 0.02, or about 5 pixel levels.

## 3. Structure

```
          z, y_onehot
              |
   int_input_quantizer x100 ──> zi/yi registers (latched at start)
                                   |
 layer_sequencer ──start/done──> bfc_layer FC1 ─┐
   (one layer at a time)         bfc_layer FC2  │  activation store
                                 bfc_layer FC3  ├─ (bit vectors act1..act5)
                                 bfc_layer FC4  │      ^      |
                                 deconv_layer DC1 ──────┘      | registered
                                 deconv_layer DC2 <── read mux ┘ read mux
                                        |
                                   sigmoid_unit ──> pix_valid/pix_addr/pix_data
```

- **`bdcgan_pkg`** holds the published sizes, this design's widths, the
  layer enumeration and the encoding of the parameter-load targets.
- **`layer_sequencer`** starts the six engines in order. It starts each
  engine one cycle after the previous one reports done. Layers do not
  overlap.
- **`bfc_layer`** computes LANES = 8 neurons at a time. It reads one input
  per cycle and applies that input to all eight neurons, using one 8-bit
  word of its weight memory. After the last input it compares the eight
  sums with their thresholds and writes eight activation bits.
- **`deconv_layer`** computes one output pixel for LANES output channels
  at a time (described in the next section).
- **`binary_mac`** is the ±x accumulator, and **`bbna_threshold`** is the
  comparison with τ. Both engines use them.
- **The activation store** in the top holds every layer's output as a bit
  vector: 600, 600, 600, 3136 and 64·14·14 = 12544 bits. The FC4 output
  is read as a 64x7x7 map in channel-major order (unit c·49 + y·7 + x).
- **The read multiplexer** gives the running engine every input as a
  small signed integer. A stored activation bit becomes +1 or −1. An index
  past the stored activations selects the matching yi. This is how the
  label concatenation is implemented: no copy of the label is ever
  stored. The read is registered, so an engine sees its data one cycle
  after it issues the address. The weight memory inside the engine is
  read with the same one-cycle latency.

## 4. How the transposed convolution is scheduled

A transposed convolution is usually described as a scatter: each input
pixel (iy, ix), multiplied by the kernel, is added into the output
window around (2·iy − 2, 2·ix − 2). Scattering needs a read-modify-write
of many partial sums. The engine uses the equivalent gather form
instead. It keeps one accumulator per output channel lane and visits, for
each output pixel (oy, ox), exactly the inputs that reach it:

- a kernel row ky contributes to output row oy only if oy + 2 − ky is
  even, and then from input row iy = (oy + 2 − ky)/2;
- so ky runs over (oy mod 2) + 2·ty for ty = 0, 1, 2. That gives three
  candidate kernel rows for even oy (ky = 0, 2, 4) and two for odd oy
  (ky = 1, 3);
- the same holds for the columns.

For every input channel the engine therefore steps through a fixed 3x3
grid of *tap slots*. A slot whose ky or kx is past 4, or whose input pixel
lies outside the map, is an idle cycle: nothing is read and nothing is
accumulated.

The fixed grid keeps the counters simple and the timing independent of
the data, at the cost of about 40 % idle slots. For comparison, visiting
all 25 taps would cost 25 cycles per input channel instead of 9.

Loop order, outermost first: channel group g → oy → ox → ci → ty → tx.
After the last slot of a pixel, the engine spends one cycle draining the
pipeline and one cycle writing:

- in the binarized layer, the LANES threshold bits go to the activation
  store;
- in the real-valued layer, the raw sum goes to the sigmoid.

Weight word ((g·C_IN + ci)·5 + ky)·5 + kx holds, in bits
[l·W_W +: W_W], the weight of output channel g·LANES + l.

## 5. Loading the parameters

The published flow compiled the trained parameters into the circuit as
constants. Trained values are not available here, so all weights and
thresholds sit in memories. A host writes them through one port while the
generator is idle, one word per cycle:
`ld_we`, `ld_sel` (`param_sel_e`), `ld_addr` (24 bits) and `ld_data`
(32 bits).

| `ld_sel` | memory | word address | word contents | words at default size |
|----------|--------|--------------|---------------|-----------------------|
| P_FC1_W | FC1 weights | g·110 + i | bit l: weight from input i to unit 8g+l | 8,250 |
| P_FC2_W, P_FC3_W | FC2/FC3 weights | g·600 + i | same | 45,000 each |
| P_FC4_W | FC4 weights | g·610 + i | same | 239,120 |
| P_DC1_W | Deconv-1 weights | ((g·74 + ci)·5 + ky)·5 + kx | bit l: channel 8g+l | 14,800 |
| P_DC2_W | Deconv-2 weights | (ci·5 + ky)·5 + kx | Q4.12 value in bits 15:0 | 1,850 |
| P_FC*_T | FC thresholds | unit index | τ in bits 23:0 | 600 / 3136 |
| P_DC1_T | Deconv-1 thresholds | output channel | τ in bits 23:0 | 64 |

Input index i of FC1 runs over z (0–99) and then y (100–109). Input index
i of FC4 runs over FC3's units (0–599) and then y (600–609). Channel ci of
either convolution runs over the 64 feature channels and then the 10 label
channels.

In total the parameters take 2,698,960 FC weight bits, 118,400 Deconv-1
weight bits, 1,850 16-bit Deconv-2 weights and 3,800 thresholds.

Scenario S3-2 of the paper also binarizes the last layer. This hardware
runs it unchanged: load +4096 or −4096 (±1.0) as the Deconv-2 weights. `tb_bdcgan_s3_2`
does this on a narrower network (64 FC units, 16 decoder channels).

## 6. Interface and timing of `bdcgan_generator`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `ld_we`, `ld_sel`, `ld_addr`, `ld_data` | in | 1, 4, 24, 32 | parameter load (section 5), only while `busy` is low |
| `start` | in | 1 | one-cycle pulse while idle; `z` and `y_onehot` are sampled in this cycle |
| `z` | in | 100 × 16 | noise vector, signed Q1.15 |
| `y_onehot` | in | 10 | class label |
| `busy`, `done` | out | 1 | `done` pulses once per image, after the last pixel |
| `pix_valid`, `pix_addr`, `pix_data` | out | 1, 10, 8 | pixels in raster order, address row·28 + column |

Cycle count from the start cycle to the done pulse, with LANES = 8:

```
2 + 6                                  start, and one start cycle per layer
+ 75·(110+2) + 2·75·(600+2)            FC1, FC2, FC3
+ 392·(610+2)                          FC4
+ 8·14·14·(74·9+2)                     Deconv-1
+ 28·28·(74·9+2)                       Deconv-2
= 1,909,748 cycles
```

Deconv-1 is 55 % of this and Deconv-2 27 %. During Deconv-2 a pixel
appears every 668 cycles. Raising LANES shortens the FC layers and
Deconv-1 in proportion, at the cost of wider weight words and more
accumulators. LANES must divide 600, 3136 and 64. Deconv-2 has a single
output channel, so it always runs with one lane.

## 7. What follows the paper and what does not

Taken from the paper:

- the layer sequence and every size;
- the label concatenation points;
- binary ±1 weights and activations, with the 1/0 bit mapping;
- zi = round(A·z) and yi = A·y with A = 2^(h−1) − 1;
- batch normalization plus activation as the threshold τ = round(μ − B/(γ·i));
- the S3-1 choice of which layers are binarized.

This design's own choices:

- everything about the circuit: engines, lanes, the gather schedule,
  memories, the load port, the sequencing and the pixel stream;
- stride 2 and padding 2, inferred from the printed map sizes;
- the Q1.15 input format and round-half-up;
- the fixed-point formats of the last layer;
- the PLAN sigmoid and the 8-bit pixel;
- channel-major reshaping of FC4's output;
- per-channel thresholds in Deconv-1;
- feeding the label channels to the decoder as 0/A integers. The paper
  does not say how the concatenated label is represented there.

Not covered:

- the discriminator and the training path, which the paper runs on a GPU;
- any host or bus interface;
- the real-valued layers of the other scenarios (S0, S1-x, S2-x). Scenarios
  S2-1 and S2-2 would also need H = 8 or 13. The H parameter allows that,
  but the decoder of those scenarios is real-valued and is not built.
- Because the weights are random, the tests check arithmetic, not image
  quality. No trained parameter set is included.

## 8. Files and simulation

`rtl/` holds one unit per file: `bdcgan_pkg`, `int_input_quantizer`,
`binary_mac`, `bbna_threshold`, `bfc_layer`, `deconv_layer`,
`sigmoid_unit`, `layer_sequencer` and the top `bdcgan_generator`. Every
parameter default is the published size or this design's chosen width.

Each unit has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. The
unit testbenches run the engines at small sizes against direct models.
`tb_bdcgan_generator` runs the whole generator at the full default size:

1. it loads random weights and thresholds;
2. it generates two images;
3. it compares every stored activation of every layer and every pixel
   with a behavioural model, allowing one level for sigmoid rounding;
4. it checks the cycle count above;
5. it verifies that label channels were read, that idle tap slots
   occurred, and that the sigmoid ran both saturated and unsaturated.

`tb_bdcgan_s3_2` repeats these checks for scenario S3-2 (Deconv-2
weights of ±1.0) on a narrower network.

Example with plain Verilator (the package first):

```
verilator --binary --timing --assert -Irtl --top-module tb_bdcgan_generator \
    rtl/bdcgan_pkg.sv rtl/*.sv tb/tb_bdcgan_generator.sv -o sim
./obj_dir/sim
```

The full-size test simulates in a few seconds. Building it with the C++
compiler takes a few minutes. To change the network size, override the
top's parameters `Z_DIM`, `Y_DIM`, `FC_UNITS`, `DEC_CH`, `DEC_HW`, `H`
and `LANES`. The testbench reads the same values from `bdcgan_pkg`, so
change both together.
