# QuadINR accelerator in SystemVerilog

An implicit neural representation (INR) stores a signal, here an image, as the
weights of a small multilayer perceptron: feed it a pixel coordinate `(x, y)`
and it returns that pixel's colour. What makes such networks good at fine
detail is usually a periodic activation function, most often `sin`, and that is
costly in hardware: lookup tables, CORDIC iterations or a long Taylor
polynomial. QuadINR replaces the sine with a piecewise quadratic that has
the same period-4 odd shape:

```
phi(x) =  x^2 + 2x      for -2 <  x <= 0
phi(x) = -x^2 + 2x      for  0 <  x <  2        repeated with period 4
```

Its Fourier series is `sum over odd n of 32/(pi^3 n^3) * sin(n*pi*x/2)`, about
`1.032 sin(pi x/2) + 0.129 sin(3 pi x/2) + ...`. So it behaves like a sine with
some extra odd harmonics. In hardware it costs one squaring, one doubling and
one addition, and it is exact: there is no approximation error beyond FP32
rounding.

This repository holds synthesizable RTL for a fully pipelined accelerator that
evaluates such a network in FP32, together with self-checking testbenches. The
architecture follows the QuadINR paper (Zhou et al., "QuadINR:
Hardware-Efficient Implicit Neural Representations Through Quadratic
Activation"). The paper gives the block structure and the sizes. It gives no
timing, interfaces or number formats beyond "FP32", so those are choices made
here. Each one is marked below and in the file headers.

## The network

```
 coord_gen --(x,y)--> input_layer  2 -> 256, phi
                          |  one feature per clock
                          v
                 linear_layer  256 -> 256, phi      hidden layer 1
                          v
                 linear_layer  256 -> 256, phi      hidden layer 2
                          v
                 linear_layer  256 -> 256, phi      hidden layer 3
                          v
                 linear_layer  256 -> 3, no phi     output layer (R, G, B)
                          v
                    result_ram  768 x 512 x 3 words

 mem_ctrl: one cycle counter that drives every layer's row reads and buffer banks
```

The network has five layers: an input layer, three hidden linear layers and
an output layer. The four layers with an activation each have their own
`quad_af` unit. Every layer makes one output neuron per clock:

* **Input layer** (`input_layer`): its weight & bias RAM gives neuron `j`'s
  `(w0, w1, b)`. Two multipliers form `w0*x` and `w1*y`. A two-input adder
  tree and a bias adder follow, then `phi`.
* **Linear layer** (`linear_layer`): has two memories. The *intermediate RAM*
  holds this layer's 256-element input vector. The *weight & bias RAM* gives one
  row of 256 weights plus the bias per clock. The *MAC array* has 256 FP32
  multipliers, which multiply the whole input vector by that row. A 256-input
  *adder tree* (8 register levels) sums the products, then a bias adder adds the
  bias and `phi` follows. In the output layer (`HAS_AF=0`) the activation is
  left out and the words go to the result RAM.

Row `j` requested at clock `t` leaves the layer at `t + L`:

| stage | cycles | input layer | hidden layer | output layer |
|---|---|---|---|---|
| weight RAM read | 1 | 1 | 1 | 1 |
| multipliers | 1 | 1 | 1 | 1 |
| adder tree | log2(fan-in) | 1 | 8 | 8 |
| bias adder | 1 | 1 | 1 | 1 |
| quadratic activation | 2 | 2 | 2 | - |
| **L** | | **6** | **13** | **11** |

## The quadratic activation unit

`quad_af` is the two-stage instance of the paper's general activation
pipeline:

1. **Stage 1:** the *power term multiplier* computes `r*r` and the
   *coefficient multiplier* computes `2*r`, side by side. The sign of the
   square is then set from the sign of `r`: positive `r` takes `-r^2`, zero and
   negative `r` take `+r^2`.
2. **Stage 2:** the *polynomial adder* adds the two terms.

The result is registered after each stage. At 100 MHz this gives 20 ns from
input to output, the latency the paper reports for its unit. One input can
enter every clock.

`r` is the input reduced modulo 4 into `[-2, 2)`. The paper defines the
function as periodic but shows no hardware for the reduction. The reduction
here is this design's own and is exact in FP32. For `|x| >= 2` the mantissa
bits worth less than 4 are the remainder. The unit folds that remainder into
`[-2, 2)` and renormalises it. This logic sits in front of the stage-1
multipliers, in the same cycle, so the latency stays at two. `PERIODIC=0`
removes it for inputs that are known to stay in `(-2, 2)`. The paper reports
the same cost for its unit over `[-2, 2]` and `[-1, 1]`, which suggests its
unit had no such reduction.

The paper's prose says the first stage computes "x^2 and ±2x". Its equation
and its table say "±x^2 + 2x", with the sign on the square. The RTL follows
the equation.

## The schedule: epochs and ping-pong buffers

This part is the least obvious. The paper says only that a memory controller
"orchestrates pipeline execution based on internal clock cycles". `mem_ctrl`
does that with a fixed timetable and no handshakes:

* Time is divided into **epochs** of `EPOCH` cycles. The default is
  `EPOCH = 256 + 13 + 1 = 270`: the longest layer needs 256 row requests plus
  its 13-cycle latency.
* In epoch `e`, stage `s` works on pixel `e - s`. Stage 0 is the input layer
  and stage 4 is the output layer. All five stages are busy at once on five
  different pixels.
* Within an epoch, each active stage requests row `cnt` at cycle `cnt` of the
  epoch. A hidden layer requests rows 0..255; the output layer requests rows
  0..2. All of a stage's outputs are written before the epoch ends, because
  `EPOCH` is at least rows + latency. The top level checks this at elaboration.
* Every intermediate RAM has **two banks**. In epoch `e` a layer writes bank
  `e mod 2` of the next layer's RAM and reads bank `(e+1) mod 2` of its own. The
  layer before it filled that bank during epoch `e-1`. A read bank stays still
  for the whole epoch, so the MAC array can read all 256 words at once.
* `coord_gen` holds the current pixel's coordinate for the whole epoch and
  steps to the next pixel on the epoch's last cycle.

A group of `N` pixels therefore takes `(N + 4) * EPOCH` cycles. `done` is seen
one cycle later. Once the pipeline is full, a pixel leaves every 270 cycles
(2.7 µs at 100 MHz). One pixel's latency is `5 * 270 = 1350` cycles, or
13.5 µs, close to the 14.24 µs total latency in the paper's resource table. A
whole 768 × 512 image takes about 106 M cycles, or 1.06 s at 100 MHz.

The output layer's words arrive while its epoch is still current, so
`stage_pix[4]` still names their pixel. The result address is
`pixel * 3 + channel`. An assertion in the top level checks this.

## Arithmetic

Everything is IEEE-754 single precision, held as raw 32-bit words (`fp32_t`).

* `fp32_mul` follows the paper's multiplier diagram: XOR the signs, add the
  exponents, multiply the 24-bit mantissas, then normalise the product with a
  one-bit shift.
* `fp32_add` follows its adder diagram: the exponent subtractor gives the
  larger exponent and the difference, a right shifter aligns the smaller
  mantissa, then a mantissa adder/subtractor and a normaliser. The normaliser
  counts leading zeros after the addition; the paper draws a leading-zero
  anticipator. The result is the same.
* Both units are combinational. The callers put registers around them.

The paper does not specify these conventions; they are this design's:

| case | behaviour |
|---|---|
| rounding | round to nearest, ties to even |
| subnormal inputs | read as zero |
| results below the normal range | flushed to a signed zero (decided before rounding) |
| overflow | infinity |
| invalid operations | quiet NaN |
| exact cancellation | `+0` |

The adder tree pads its inputs to a power of two with `+0`. At every level it
adds neighbours `2i` and `2i+1`, so the rounding order is fixed and can be
reproduced. The testbenches rely on this: they compare bit-exactly with a
reference model that adds in the same order.

`coord_gen` walks the image in raster order. It gives
`x = (2*col - (W-1)) * fp32(1/(W-1))` and the same for `y`, so both
coordinates lie in `[-1, 1]`. The integer is converted to FP32 exactly, so
each coordinate has a single rounding. The paper only names this block; the
normalisation follows common INR practice.

## Using it

### Parameters of `quadinr_accel`

| parameter | default | meaning |
|---|---|---|
| `W`, `H` | 768, 512 | image size |
| `HID` | 256 | hidden width, multipliers per MAC array |
| `NH` | 3 | hidden layers |
| `ODIM` | 3 | output channels |
| `PERIODIC` | 1 | modulo-4 reduction in front of each activation |
| `EPOCH` | `HID + layer latency + 1` = 270 | cycles per schedule epoch |

The paper gives `W`, `H`, `HID` and the layer count. `ODIM` is 3 for colour
images. `EPOCH` and `PERIODIC` are this design's.

### Loading weights

Load the weights before `start`, one word per clock, through the `wb_wr`
struct `{en, layer, row, col, data}`:

| `layer` | layer | `row` | `col` |
|---|---|---|---|
| 0 | input layer | neuron 0..255 | 0 = weight on `x`, 1 = weight on `y`, 2 = bias |
| 1..3 | hidden layers | neuron 0..255 | input 0..255, 256 = bias |
| 4 | output layer | channel 0..2 | input 0..255, 256 = bias |

The default network has 198,915 words.

### Running

1. Pulse `start` with `num_pixels = N > 0`. This evaluates pixels `0..N-1` in
   raster order.
2. Each result word appears on `pix_valid`/`pix_addr`/`pix_data` and is also
   written into the result RAM.
3. `done` pulses once for one cycle after the group. `busy` is high while the
   group runs. A `start` while busy is ignored.
4. Read the result RAM through `res_rd_addr`; the word appears on
   `res_rd_data` one cycle later.

Reset is asynchronous and active-low. It clears the pipeline registers and
valid bits. The memories are not reset. There is no back-pressure anywhere:
the output stream cannot be stalled.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares the
module's outputs with independent FP32 reference arithmetic from `tb_fp_pkg`:
double precision, rounded once per operation, with the same flush and rounding
conventions as the hardware. Each one also checks the latencies above. Each
ends by printing `TB_RESULT checks=N failures=M`.

| testbench | what it covers |
|---|---|
| `tb_fp32_mul`, `tb_fp32_add` | ~25k–30k random and edge-case operations each, bit-exact: overflow, flush, ties, cancellation, exponent gaps 0–40 |
| `tb_quad_af` | 40k inputs, including values up to ±2^30 for the reduction and fixed points such as `phi(0.5)=0.75` and `phi(5)=1`; 2-cycle latency and tag order |
| `tb_fp_adder_tree`, `tb_mac_array` | 256-wide default size, streaming with gaps, 8- and 1-cycle latency |
| `tb_weight_bias_ram`, `tb_intermediate_ram`, `tb_result_ram` | the memories at default size, including bank isolation while the other bank is written |
| `tb_coord_gen` | every coordinate of the 768 × 512 image, plus wrap-around and clear |
| `tb_mem_ctrl` | every controller output, cycle by cycle, against the epoch formula |
| `tb_input_layer`, `tb_linear_layer` | full-size layers (a hidden layer and an output layer) against a reference dot product in tree order |
| `tb_quadinr_accel` | end to end at reduced size (8 × 4 image, width 16): all 32 pixels, then a second group; see below |
| `tb_quadinr_full` | end to end with every parameter at its default: all weights loaded, groups of 4 and 2 pixels, bit-exact, with the 270-cycle epoch timing |

`tb_quadinr_accel` counts each mechanism of the design and fails if one never
happens:

* stages working at the same time;
* bank flips;
* activation inputs outside `[-2, 2)`, which exercise the periodic reduction;
* coordinates stepping to a new image row;
* a second group after `done`.

Both end-to-end testbenches share `tb_accel_checker`.

With plain Verilator, from the repository root:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/quadinr_pkg.sv tb/tb_fp_pkg.sv tb/tb_quadinr_accel.sv \
    --top-module tb_quadinr_accel
./obj_dir/Vtb_quadinr_accel
```

Swap in any other testbench name. `tb_quadinr_full` takes about 4 minutes to
compile, because about 2,000 FP32 units become C++, and about 15 seconds to
run.

## Where this departs from the paper, and what is not here

* **Baseline activations.** The paper's general N-stage Taylor pipeline was used
  to build the activations it compares against: sine, Gaussian, wavelet,
  FINER, sinc, plus a preliminary `|x|+1` stage. It is not part of the
  QuadINR design and is not included. The quadratic unit is its two-stage
  case. The Taylor coefficients of those baselines are not printed in the paper.
* **"Sine activations" in the text.** One sentence of the paper's accelerator
  description calls the activations between layers "sine activations". Its
  block diagram and everything else say piecewise quadratic, which is what is
  built.
* **Choices of this design.** All the interfaces are this design's own: the
  epoch schedule, the double-buffered intermediate RAMs read in parallel, the
  weight load port, the group start/done interface and the result address
  layout. So are the numeric conventions above.
* **Result RAM size.** The result RAM holds a whole 768 × 512 × 3 FP32 image
  (37.7 Mbit). The paper's FPGA total of 231 block RAMs is less than that, and
  the paper does not say how much of the image its result memory held.
* **Video.** The paper also fits a video. A video INR needs a third input
  coordinate (time), and the input layer described, and built here, takes two.
* **Target-specific parts.** No FPGA or standard-cell specifics are included:
  no DSP mapping, no memory macros. The paper's resource, power and area
  figures were not reproduced. On an FPGA, a 256-word vector read in one cycle
  implies registers or LUT RAM rather than one block RAM.
* **Timing closure.** The modulo-4 reduction, the FP32 multiply and the
  leading-zero normaliser each sit in a single cycle. A 1 GHz ASIC target would
  need those stages split further.

## Files

`rtl/` holds one module or package per file:

| file | contents |
|---|---|
| `quadinr_pkg` | shared types and constants |
| `fp32_mul`, `fp32_add` | FP32 units |
| `quad_af` | quadratic activation |
| `fp_adder_tree`, `mac_array` | datapath |
| `weight_bias_ram`, `intermediate_ram`, `result_ram` | memories |
| `coord_gen`, `mem_ctrl` | control |
| `input_layer`, `linear_layer` | layers |
| `quadinr_accel` | top level |

`tb/` holds the testbenches above, the reference package `tb_fp_pkg` and the
shared end-to-end checker `tb_accel_checker`.
