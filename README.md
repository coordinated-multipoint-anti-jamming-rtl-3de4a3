# A 128-lane complex-network accelerator for unfolded beam-pattern step sizes

In coordinated multipoint anti-jamming beam-pattern synthesis, every access
point (AP) shapes the phases of a hybrid phased array. It does this with a
short, fixed number T of Riemannian-gradient iterations on the unit-modulus
manifold:

    w <- exp(j * angle(w - mu_t * grad_R f(w))),   t = 1..T

The step sizes mu_1..mu_T are not hand tuned. A small complex-valued neural
network (CvNN) predicts them from three vectors of the AP's problem:

- the least-squares initial beamformer;
- its Euclidean gradient;
- its Riemannian gradient.

Each vector has N_r = 64 complex entries. On an ARM + FPGA system-on-chip, the
ARM side computes these vectors and runs the iterations and the surrounding
ADMM updates. The FPGA side evaluates the network, which is the part of the
algorithm worth accelerating.

This RTL is that FPGA side. It is an AXI4-Lite peripheral that holds the
trained weights of a three-layer complex network and computes

    h1 = CReLU(W1 x  + b1)        x  : 192 complex inputs (3 x 64)
    h2 = CReLU(W2 h1 + b2)        h1 : 64 complex values
    mu = | Re(W3 h2 + b3) + Im(W3 h2 + b3) |      mu : 15 real step sizes

on a pipelined engine of 128 single-precision multiplier lanes with an
11-cycle latency. One inference takes 578 clock cycles at the default sizes.
The network is shared by all APs, so one device serves the L = 10 APs of the
reference deployment one after another.

## Datapath: four real lanes per complex term

All arithmetic is IEEE-754 single precision. A complex multiply is split into
its four real products:

    re = wr*xr - wi*xi        im = wr*xi + wi*xr

The engine (`cvnn_core`) takes one *beat* per cycle. A beat holds CPB = 32
complex weights and 32 complex inputs of one output neuron. That gives
4 x 32 = 128 multipliers. The pipeline stages are:

| stage | what happens |
|---|---|
| 1 | register inputs and weights |
| 2 | 128 fp32 products (`fp32_mul`), registered; the `wi*xi` product is negated (a sign flip) |
| 3-8 | two balanced adder trees of 64 leaves each, one for the real part and one for the imaginary part: 6 levels of `fp32_add`, one register per level |
| 9 | beat accumulator: `in_first` loads the beat sum, later beats add to it, `in_last` releases the total |
| 10 | bias add |
| 11 | activation (`cvnn_act`) |

The latency from the last beat of a neuron to its result is
`5 + log2(2*CPB)` = 11 cycles. The stage split is a choice of this design. The
lane count, the latency and the real/imaginary decomposition come from the
original description. That description draws each lane as a multiply-add box
chained over the inputs. Here a balanced tree is used instead, because a chain
over 32 terms could not meet an 11-cycle latency.

A neuron whose input is wider than 32 takes several consecutive beats. Layer 1
takes 6 beats per neuron, and layers 2 and 3 take 2. The beats of one neuron
must not be interleaved with those of another. Idle cycles in between are
allowed.

The trees and the accumulator add in a fixed order. The first partial sums are
lane pairs (0,1), (2,3) and so on. The beats are then added in order. Results
are therefore deterministic, but they are not the same as a sequential
floating-point sum. The testbenches' reference model follows the same order,
so they compare bit for bit.

### Floating-point policy

`fp32_mul` and `fp32_add` are combinational. Both use this policy:

- round to nearest, ties to even;
- subnormal inputs and results flush to zero;
- overflow gives infinity;
- the multiplier returns the canonical quiet NaN for Inf x 0;
- exact cancellation in the adder gives +0;
- in the adder, an Inf or NaN operand propagates, and Inf - Inf returns an
  infinity rather than NaN.

The original states only "32-bit floating point". Everything above is this
design's choice. It costs nothing for this network, whose values stay far from
both ends of the range.

### Activations

`cvnn_act` is one register stage with three modes:

- **CReLU** (layers 1 and 2): a real ReLU applied to the real and imaginary
  parts separately. A part with its sign bit set, including -0, becomes +0.
- **Sum+Abs** (layer 3): `|Re + Im|` as a real number with imaginary part 0.
  The absolute value keeps every predicted step size non-negative.
- **None**: pass-through. It is not used by the controller.

## Sequencing an inference

`layer_ctrl` runs the three layers in order. Within a layer it issues the beats
neuron by neuron, one beat per cycle, with no gaps.

Each beat carries:

- the weight row, which is a running counter;
- the input row, which is the beat index;
- the bias address;
- the activation mode;
- a tag {layer, neuron} that travels down the pipeline and says where the
  result goes.

A dense layer needs every output of the previous layer. So after the last beat
of a layer, the controller waits until the core returns that layer's last
result. This **layer barrier** costs LAT + 1 = 12 cycles per layer. Including
the one-cycle memory read, the timing is:

    cycles = sum_l BEATS_l * OUT_l + 3 * (LAT + 1)
           = 64*6 + 64*2 + 15*2 + 36 = 578

The multipliers are busy on 542 of those 578 cycles (94 %). The idle cycles
are the three pipeline drains. Consecutive inferences are not overlapped. The
original mentions pipelining between layers. Overlapping the layers of two
different APs would hide the drains, but it would need double-buffered
features and it is not built.

`busy` is high for exactly the count above. The count is latched into the
CYCLES register, and `done` raises the interrupt.

## Memories

**Weights** (`weight_mem`). There are 2·CPB = 64 banks of 32-bit words, so one
whole beat row is read in one cycle:

- bank 2k holds Re w_k and bank 2k+1 holds Im w_k;
- rows are stored in the order the controller issues them: layer 1 neuron 0
  beats 0..5, then neuron 1, and so on, followed by layer 2 and layer 3;
- a neuron's weights past its input width must be written as zero (padding).

At the default sizes this is 542 rows x 64 words = 1.11 Mbit, about 32 BRAM36
blocks. The reference FPGA build reports 40 BRAMs. Biases live in a separate
small array of 3 x 64 complex values. The read port is registered, so data
arrives one cycle after the request.

**Features** (`act_buf`). This holds four buffers:

- the network input x0: 192 complex values, in the order LS solution,
  Euclidean gradient, Riemannian gradient;
- h1 and h2;
- the T step sizes.

x0, h1 and h2 are organised as rows of 32 complex values, so a beat reads one
row. Entries past a layer's width stay zero. Layer 1 reads x0 and writes h1,
layer 2 reads h1 and writes h2, and layer 3 reads h2 and writes the real part
of its result into mu.

## Host interface

`axil_slave` is a 32-bit AXI4-Lite slave with one outstanding transaction per
direction. It accepts a write when the AW and W channels are valid together.
Read data comes one cycle after the address is accepted. Write strobes are
ignored, because every register is a whole 32-bit word. Assertions check that
B and R hold their values under back-pressure.

Register map (byte addresses):

| address | access | contents |
|---|---|---|
| 0x00000 | W | CTRL: bit 0 start, bit 1 clear done |
| 0x00004 | R | STATUS: bit 0 busy, bit 1 done (= `irq`) |
| 0x00008 | R | CYCLES: busy cycles of the last inference |
| 0x0000C | R | CONFIG: {T[7:0], CPB[7:0], N_IN[15:0]} |
| 0x01000 + 4t | R | mu[t], fp32 |
| 0x04000 + 8i (+4) | W | x0[i] real (imaginary) part |
| 0x08000 + 4·{layer[1:0], neuron[8:0], im} | W | bias |
| 0x40000 + 4·(row·2·CPB + lane) | W | weight word |

A typical sequence:

1. Load the weights and biases once.
2. For each AP, write its 384 input words.
3. Write CTRL = 1.
4. Wait for `irq`.
5. Read the 15 mu words.

Writes to the input, bias and weight regions are dropped while `busy` is high,
and so is a second start. The 20-bit address space holds up to 3072 weight
rows.

## Parameters

`cvnn_accel` has these parameters:

- `CPB`: complex terms per beat. It must be a power of two, and the lane count
  is 4·CPB.
- `N_IN`, `H1`, `H2`, `T`: the layer widths.
- `ADDR_W`.

The defaults are 32, 192, 64, 64, 15 and 20. N_IN = 3·64 and T = 15 are the
reference configuration. The hidden widths of the hardware network are not
published, so H1 = H2 = 64 is an assumption.

For the 8 x 16 = 128-element array of the measurement setup, the network input
grows to N_IN = 384. This gives 926 weight rows and 962 cycles per inference.

## Departures from the original description

- **Three layers.** The algorithm is described with a five-layer hyperparameter
  network. The FPGA version is described as simplified to three layers, and
  that is what is built. The weights come from training the three-layer
  network.
- **Hidden widths** of 64 are an assumption.
- **Adder trees** replace the drawn multiply-add chains, to meet the stated
  11-cycle latency with 128 lanes.
- **Floating-point corner cases** are defined here: flush-to-zero and RNE.
- **The bus** is AXI4-Lite with a register map of this design. The original
  names only "AXI".
- **No overlap between inferences.** The layer barrier drains the pipeline.
- **Out of scope.** This RTL does not include the iterations that use mu, the
  ADMM updates, the least-squares and gradient computation, the digital
  beamformer, the phase-shifter code lookup, or the RF front end. In the
  reference system these run as ARM software or are analog hardware.

## Files

| file | content |
|---|---|
| `rtl/cvnn_pkg.sv` | shared types (`fp32_t`, `cplx_t`, `act_mode_e`) and default sizes |
| `rtl/fp32_mul.sv`, `rtl/fp32_add.sv` | fp32 arithmetic |
| `rtl/cvnn_act.sv` | activation stage |
| `rtl/cvnn_core.sv` | 128-lane pipelined engine |
| `rtl/weight_mem.sv`, `rtl/act_buf.sv` | weight/bias store, feature buffers |
| `rtl/layer_ctrl.sv` | inference sequencer |
| `rtl/axil_slave.sv` | AXI4-Lite slave |
| `rtl/cvnn_accel.sv` | top level |
| `tb/fp_ref_pkg.sv` | real-number fp32 reference (rounding identical to the RTL) |
| `tb/tb_<block>.sv` | self-checking unit tests |
| `tb/tb_cvnn_accel.sv` | end to end at default sizes, 10 inferences (one per AP) |
| `tb/tb_cvnn_accel_nr128.sv` | end to end with N_IN = 384 (128-element array) |

## Simulating

Every testbench checks itself and finishes with a line of the form
`TB_RESULT checks=N failures=M`. Each one has a watchdog. Example with
Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Mdir obj \
      rtl/cvnn_pkg.sv tb/fp_ref_pkg.sv rtl/fp32_mul.sv rtl/fp32_add.sv \
      rtl/cvnn_act.sv rtl/cvnn_core.sv rtl/weight_mem.sv rtl/act_buf.sv \
      rtl/layer_ctrl.sv rtl/axil_slave.sv rtl/cvnn_accel.sv \
      tb/tb_cvnn_accel.sv --top-module tb_cvnn_accel
    obj/Vtb_cvnn_accel

The full-size end-to-end test builds in about half a minute and runs in about
one second.

The tests use random fp32 data generated in the testbench. The reference
values are computed with `real` arithmetic and rounded to fp32 after every
operation, in the engine's order. The unit tests are:

- `tb_fp32_mul` and `tb_fp32_add`: 20,000 to 30,000 random and corner-case
  operand pairs.
- `tb_cvnn_core`: runs at CPB = 4 and checks both values and latency.
- `tb_layer_ctrl`: uses a model of the datapath to check the beat order, the
  barrier and the cycle count.

The end-to-end tests count these events and fail if any of them never
happens:

- AXI back-pressure;
- CReLU clamping;
- a negative layer-3 sum passing through Abs;
- multi-beat accumulation;
- layer barriers;
- a start and an input write issued while busy (both must be ignored).
