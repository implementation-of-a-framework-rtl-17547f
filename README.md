# BES network: a streaming image classifier with run-time weights

This is synthesizable SystemVerilog for a small neural-network inference
engine meant to sit next to a detector readout in an FPGA. It classifies
28x28 single-channel images (MNIST digits were used as the test set) with
the following network:

| layer            | output  | activator  |
|------------------|---------|------------|
| MaxPooling2D 2x2 | 14x14   | none       |
| Flatten          | 196     | none       |
| Dense            | 10      | Leaky ReLU |
| Dense            | 40      | Leaky ReLU |
| Dense            | 10      | Leaky ReLU |

Two ideas shape the hardware:

* **Streaming between layers.** Every layer is connected to the next by a
  ready/valid stream, not by a memory. A layer starts as soon as its first
  input arrives. Pooled rows leave the pooling layer while the image is
  still coming in, and the first dense layer adds each pooled value into its
  sums as it arrives. A dense layer cannot produce anything before it has
  seen all of its inputs, so the latency is set mostly by how fast the
  first dense layer can take in its 196 inputs.
* **Weights and biases are data, not logic.** All 2760 weights and 60 biases
  sit in memories written through a load port after the FPGA is configured.
  A retrained network is deployed by reloading them, with no new FPGA build,
  and the timing and resources stay the same whatever the values.

At the default sizes the engine gives a frame's 10 scores 251 clocks after
the first image row goes in. At 250 MHz that is 1.004 us. Frames sent back to
back come out every 207 clocks.

## Files

| file                     | what it is |
|--------------------------|------------|
| `rtl/snl_pkg.sv`         | number formats, load-port address struct, the dot-product width rule |
| `rtl/snl_pool2d.sv`      | 2x2 stride-2 pooling, max or average, with a one-row line buffer |
| `rtl/snl_leaky_relu.sv`  | Leaky ReLU activator (combinational) |
| `rtl/snl_dense_params.sv`| weight banks and bias registers of one dense layer, written at run time |
| `rtl/snl_dense.sv`       | dense layer: streaming multiply-accumulate, bias, requantize, activate |
| `rtl/bes_network.sv`     | top: pooling, then three dense layers |
| `tb/tb_*.sv`             | one self-checking testbench per module |

## How a frame moves through the engine

### Input: one image row per beat

The image enters on `s_axis_*`, one row of 28 8-bit pixels (224 bits) per
beat, top row first. The data path is made wide over the columns. That is
the usual FPGA trick of presenting several values per clock, applied here
to columns because the image has only one channel. With one pixel per beat,
reading in the image alone would take 784 clocks, far more than the
latency target. `PIX_PER_BEAT` can be set to any even divisor of the row
width. At 4 pixels per beat (7 beats per row) the first dense layer sits idle
during each even row, because even rows produce no pooled values. The
latency then grows to 335 clocks.

### Pooling (`snl_pool2d`)

Each even row is stored in a line buffer. When the matching beat of the
next odd row arrives, each 2x2 window is reduced, and the 14 results go to
the output register as one beat. Even rows are always accepted. An odd row
waits (`s_ready` low) while the previous pooled beat is still waiting to be
taken. The first pooled row is ready 2 clocks after the first image row.

### Flatten

Flatten has no hardware. Pooled values leave row by row, left to right,
which is the row-major flattened order. The first dense layer counts its
inputs in that order, so input `i` of that layer is pooled pixel
(`i / 14`, `i % 14`).

### Dense layers (`snl_dense`)

A dense layer with NIN inputs and NOUT neurons has NOUT accumulators and
NOUT multipliers. Each clock it takes **one** input value `x[i]` from the
current beat. It reads the weights of input `i` for every neuron in one
access, since the weight store has one bank per neuron, and adds
`w[o][i] * x[i]` into every accumulator. The beat is acknowledged in the
clock its last value is taken. There are two pipeline stages: a weight
read, which is synchronous like a block RAM, and the multiply-accumulate.
So the sums are complete NIN + 1 clocks after the first value is taken.
The first input loads each accumulator with its bias instead of adding to
it.

When the sums are complete, `m_valid` rises. The outputs are computed from
the accumulators by combinational logic: shift, saturate, then Leaky ReLU.
There is **no output register**. The layer therefore stays blocked,
holding its accumulators, until the next layer has taken the whole result.
The next layer takes a 10- or 40-value beat one value per clock, so this
hold lasts as many clocks as the next layer has inputs. This saves a
register stage per layer. The cost is that a frame can enter a dense layer
only after the previous frame's result has left it.

### Cycle budget at the default sizes

| step                                               | clocks |
|----------------------------------------------------|--------|
| first image row taken to first pooled row ready    | 2      |
| dense 1: 196 inputs, one per clock, + 1 pipeline   | 197    |
| dense 2: 10 inputs + 1                             | 11     |
| dense 3: 40 inputs + 1                             | 41     |
| **total, first row to scores valid**               | **251** |

The first dense layer sets the pace. It takes a 14-value pooled beat every
14 clocks while the image supplies one every 2 clocks, so it holds back the
pooling layer, and through it the image stream. When frames are sent back to
back, the first dense layer is busy for 196 clocks of summing, 1 pipeline
clock, and 10 clocks while the second layer reads its result. That gives
one frame per 207 clocks (about 1.2 Mframes/s at 250 MHz). The second and
third layers are faster than this and never limit the rate.

## Numbers

The network sizes come from the reference implementation. The number
formats do not: that implementation computed in floating point and left
quantization for later. This RTL uses fixed point throughout:

| quantity          | format (`snl_pkg`)                          |
|-------------------|---------------------------------------------|
| pixel             | 8-bit unsigned, value = pixel / 256 (Q0.8)  |
| weight, bias      | 16-bit signed, Q7.8                         |
| activation, score | 16-bit signed, Q7.8                         |

Every dense output is computed as

    y = lrelu( sat16( (bias * 2^8 + sum_i w[i] * x[i]) >>> 8 ) )

The right shift truncates toward minus infinity. `sat16` clamps to
[-32768, 32767]. `lrelu(v)` is `v` for `v >= 0` and `(v * 77) >>> 8` below
zero, a slope of 0.301. The slope is not given by the reference design.
0.3 is the usual Keras default, and it is a parameter (`ALPHA`, in 1/256).

**Accumulator width.** A product needs the sum of its operands' widths. A
sum of N products needs ceil(log2 N) more bits. `snl_pkg::dot_width(a, b,
count)` returns `a + b + $clog2(count)`. As an example, 12-bit data times
8-bit weights summed 9 times gives 24 bits. The dense layer sizes its
accumulators as `dot_width(x bits, 16, NIN + 1) + 1`. The bias counts as one
more term, and one bit more is needed because the bias is scaled by 2^8
while an unsigned 8-bit pixel stays below 2^8. The first layer's
accumulators are 9 + 16 + 8 + 1 = 34 bits wide, the second's 37 and the
third's 39. They cannot overflow. Saturation happens only when the result
is narrowed to 16 bits.

Converting trained floating-point parameters: weight or bias
`round(v * 256)`, clamped to 16 bits. A Keras model that scales pixels by
1/255 sees values 256/255 times smaller than this engine's pixel/256. Fold
that factor into the first layer's weights, or accept the 0.4 % difference.

## Loading weights and biases

All three dense layers share one write port, `cfg_we`, `cfg_addr` and
`cfg_wdata`. A write is taken in any clock where `cfg_we` is high. The
address is the packed struct `snl_cfg_addr_t`:

| field     | bits | meaning |
|-----------|------|---------|
| `layer`   | 2    | 0, 1, 2 = first, second, third dense layer |
| `is_bias` | 1    | 1 = bias of neuron `out_idx`; 0 = weight |
| `out_idx` | 6    | neuron (0 .. NOUT-1) |
| `in_idx`  | 8    | input (0 .. NIN-1), ignored for biases |

Writes to a neuron or input beyond the layer's size are dropped. For a Keras
`Dense` kernel of shape (inputs, outputs), write `kernel[i][o]` to
`out_idx = o, in_idx = i`. For the first layer, `i` is the flattened index
`row * 14 + col` of the pooled image. Biases reset to zero. Weight memory
has no reset, so load every weight before the first frame. Writes are
accepted at any time, but a write during a frame mixes old and new weights
in that frame. Load the parameters while no frame is in flight. A full load
is 2820 writes.

## Ports of `bes_network`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `cfg_we`, `cfg_addr`, `cfg_wdata` | in | 1, 17, 16 | parameter load port (above) |
| `s_axis_tvalid`, `s_axis_tready` | in, out | 1 | image stream handshake |
| `s_axis_tdata` | in | 28 x 8 | one image row, element 0 = leftmost pixel |
| `m_axis_tvalid`, `m_axis_tready` | out, in | 1 | result handshake |
| `m_axis_tdata` | out | 10 x 16 | the 10 scores, signed Q7.8 |

Both streams follow the AXI4-Stream rule: a beat moves in a clock where
valid and ready are both high. A held beat stays unchanged until it is
taken. Frames are not marked. The engine counts rows, so after reset every
28 beats form one image. The engine has no argmax: the host gets the 10
scores.

Parameters (defaults are the network above): `IMG_ROWS`, `IMG_COLS`,
`PIX_PER_BEAT`, `N_HIDDEN1`, `N_HIDDEN2`, `N_OUT`, `ALPHA`. The load-port
fields limit a layer to 64 neurons and 256 inputs. Enlarge `OUT_BITS` and
`IN_BITS` in `snl_pkg` for bigger layers.

## Where this RTL departs from the reference implementation

The reference implementation was produced by high-level synthesis from a
C++ template library and ran on a Xilinx KCU1500 at 250 MHz. This RTL
follows its structure: the layer sequence and sizes, Leaky ReLU on every
dense layer, streaming between layers, sums built from the data already
available, run-time parameters, and no pipeline register between dense
layers. These points differ:

* **Fixed point instead of floating point.** See *Numbers*. Results match a
  fixed-point model bit for bit. They will differ slightly from a
  floating-point Keras run.
* **Degree of parallelism.** The reference used 298 DSP blocks. Here each
  dense layer does one multiply per neuron per clock, 60 multipliers in
  total, plus 60 small constant multiplies in the activators. The latency,
  251 clocks, still stays inside the reference's 1.1015 us (275 clocks at
  250 MHz). Both the parallelism and the one-row-per-beat input are this
  design's choices.
* **Parameter memory layout and load port** are this design's own. The
  reference's host software wrote a layout that is not documented.
* **Not included:** the PCIe/DMA path and host software that feed the
  engine. Also left out are library layers the BES network does not use
  (Conv2D, Reservoir, two-pass activators such as SoftMax) and the planned
  option of a pipeline register after each dense layer. Average pooling is
  included as a mode of the pooling layer (`MODE = POOL_AVG`). It divides by
  4 by multiplying with 2^16 / 4 and shifting right 16, which truncates.

## Verification

Each testbench computes its expected values on its own in integer
arithmetic. It prints `TB_RESULT checks=N failures=M` and stops on a
watchdog if the design hangs.

* `tb_snl_leaky_relu` checks edge values and 4000 random inputs.
* `tb_snl_pool2d` runs max and average pooling at 28x28 with one row per
  beat, and at 8x12 with 4 pixels per beat. It uses random gaps and
  back-pressure, and checks the 2-clock first-output timing.
* `tb_snl_dense_params` checks loading and reloading. It also checks that
  writes to other layers or out-of-range indices are ignored, and the
  synchronous read.
* `tb_snl_dense` tests a small signed layer and the 196x10 first layer.
  With small weights it checks the NIN + 1 clock latency. With full-range
  weights it exercises saturation. It applies back-pressure and checks that
  no input is taken while a result is held.
* `tb_bes_network` runs the whole engine at its default sizes: seven
  sparse random images and two weight sets loaded through the port. Frame 0
  must take exactly 251 clocks. The other frames run back to back with
  input gaps and output back-pressure. The testbench checks that input
  stalls, held results, dense-to-dense holds, overlapping frames, a weight
  reload, saturation and negative activations each occur.
* `tb_bes_network_p4` runs the same test with 4-pixel input beats.

To run one testbench with Verilator 5, from the project root:

    verilator --binary --timing --assert -Irtl -y rtl rtl/snl_pkg.sv \
        tb/tb_bes_network.sv --top-module tb_bes_network -Mdir obj
    ./obj/Vtb_bes_network

Swap in the other testbench names the same way. The full network test
finishes in well under a second.
