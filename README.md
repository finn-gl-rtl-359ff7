# A quantised ConvLSTM accelerator for limit-order-book trend prediction

This is synthesizable SystemVerilog for a small streaming accelerator. It
classifies the short-term mid-price trend of a stock as down, stationary or
up. The input is a window of 100 consecutive limit-order-book snapshots.
The network is a ConvLSTM: six 3x3 convolutions reduce the window to a
sequence of 25 feature vectors, and a 64-unit LSTM reads that sequence. Two
dense layers then turn the LSTM's last hidden state into three class scores.

The design works entirely in integers:

* **Weights are 8-bit and activations 6-bit (W8A6).** The input features are INT8.
* **Every non-linearity is a threshold count.** This covers ReLU, sigmoid and tanh,
  including the BatchNorm, bias and scale factors around them. An
  activation's output code is the number of stored thresholds that the
  integer input reaches. Because each of these functions is monotonic, a
  sorted threshold table reproduces any of them, quantiser included, with
  comparators only and no exponentials.
* **The LSTM's recurrence is a loop, not an unrolled chain.** One matrix
  unit computes all four gates of a step. The hidden state it produces is fed
  back as part of the next step's input vector.

The layer sizes, precisions, kernel sizes and strides are those of the
published Q-ConvLSTM model that runs on the FI-2010 dataset. The folding
(parallelism), the stream and configuration interfaces and a few numeric
conventions belong to this RTL. They are marked as such below.

## The network

| stage     | operation                         | output map       | weights        | folding (PE x SIMD) |
|-----------|-----------------------------------|------------------|----------------|---------------------|
| input     | 100 snapshots x 40 INT8 features  | 100 x 40 x 1     |                |                     |
| conv1_1   | 3x3, stride 2, 64 ch, BN+ReLU     | 50 x 20 x 64     | 64 x 9         | 8 x 1               |
| conv1_2   | 3x3, 32 ch, BN+ReLU               | 50 x 20 x 32     | 32 x 576       | 32 x 4              |
| conv1_3   | 3x3, 32 ch, BN+ReLU               | 50 x 20 x 32     | 32 x 288       | 32 x 4              |
| conv2_1   | 3x3, stride 2, 64 ch, BN+ReLU     | 25 x 10 x 64     | 64 x 288       | 32 x 4              |
| conv2_2   | 3x3, 16 ch, BN+ReLU               | 25 x 10 x 16     | 16 x 576       | 16 x 4              |
| conv2_3   | 3x3, 4 ch, BN+ReLU                | 25 x 10 x 4      | 4 x 144        | 4 x 4               |
| LSTM      | 25 steps, 40 in, 64 hidden        | h_25: 64         | 256 x 104      | 32 x 4              |
| fc1       | dense + ReLU                      | 256              | 256 x 64       | 32 x 4              |
| fc2       | dense, raw scores                 | 3                | 3 x 256        | 3 x 4               |

The maps are stored in height x width x channel order, so the stream carries
one snapshot after another and the channels of a pixel come together.
After the two stride-2 layers, each of the 25 rows of the 25 x 10 x 4 map
holds 40 codes, and these arrive consecutively. One row is one LSTM time
step, so no reordering is needed between the convolutions and the LSTM.

All convolutions pad the frame with one zero pixel on every side. The
source model does not state this padding, but it is the only choice that
turns 100 x 40 into the 25-step, 40-input sequence that the LSTM is
specified with. The input width of 40 is also inferred: it is the 10-level
book, with price and volume on both sides.

The top level is `convlstm_top`. Its parameters are the frame size, the
channel counts and the folding. The defaults are the table above.

## Threshold activations

`multithreshold` is used everywhere an activation occurs. For an integer
input `x` and an ascending table `T[0..NT-1]`, it outputs

    y = #{ k : x >= T[k] } + BIAS

Two forms are used:

* **Unsigned 6-bit codes [0, 63].** 63 thresholds, bias 0. These follow ReLU
  and sigmoid.
* **Signed narrow-range 6-bit codes [-31, 31].** 62 thresholds, bias -31.
  These follow tanh, and they are the LSTM's cell and hidden states.

Suppose a trained layer computes `q(act(s*x + b))`. Here `s` and `b` are
the combined floating-point scale and bias of everything between the
integer accumulator and the quantiser `q`, BatchNorm included. Then
`T[k]` is the smallest integer `x` at which the quantised output reaches
level `k+1`. When the thresholds are computed offline this way, the
hardware needs no floating-point arithmetic at all. Each convolution and
dense layer has one table per output channel. The tables are stored in
the accumulator's width.

The unit is fully parallel: NT comparators and a population count. Each
matrix unit has one instance, placed on its serial output. The LSTM cell
has seven instances.

## The matrix-vector unit

`mvau` computes `act(W x)` for an MH x MW weight matrix.

* **Folding.** PE rows are computed at once, each taking SIMD products per
  cycle. An input vector arrives as SF = MW/SIMD beats, and the matrix is
  covered in NF = MH/PE neuron folds.
* **Input buffer.** The first fold consumes the beats as they arrive and
  copies them into an input buffer. The remaining folds replay the buffer.
* **Serial output.** After each fold, its PE accumulators leave one per
  beat, in row order. When `USE_THR` is set they pass through the
  threshold unit for that row; otherwise (the class-score layer) the raw
  accumulators go out.
* **Two accumulator banks.** A finished fold is copied into an output
  bank, so the next fold computes while the previous one drains. The unit
  waits only when a fold finishes before the previous fold has drained.

Cost per vector: NF x max(SF, PE) cycles in steady state.

The accumulator width is `IN_W + 8 + clog2(MW) + 1`. The input elements are
signed: unsigned 6-bit codes are widened to 7 bits, signed ones are used as
they are.

SIMD is 4 everywhere it can be (1 for the single-channel first layer). The
source generated its matrix units with a 36-bit weight-stream limit, which
means SIMD x 8-bit weights <= 36. PE is chosen so that the layers land near
150,000 cycles per frame, which is 1000 frames/s at 150 MHz. This was the
throughput target the source design was compiled for.

## Convolutions

`conv_layer` is a sliding-window generator (`swg`) feeding an `mvau`. The
weight column order is `(ky*3 + kx)*CIN + c`.

The window generator keeps a circular line buffer of 3 + STRIDE input rows:

1. Input elements are written one per beat into row slot `y mod (3 + STRIDE)`.
2. An output row starts as soon as the input rows it covers are present.
   For each output pixel in raster order it emits the 3 x 3 x CIN window as
   SIMD-wide beats. Taps that fall outside the frame read as zero.
3. Meanwhile loading continues, up to 3 + STRIDE rows past the oldest row
   still in use. The next frame starts loading once the current one has
   been fully loaded and emitted.

So loading overlaps computing. The largest line buffer holds 4 x 20 x 64
codes, in conv1_2.

`fc_layer` replaces the window generator with `stream_dwc`, which packs
single elements into SIMD-wide beats.

## The LSTM layer

`qlstm_layer` implements, for t = 1..25,

    f = sigma(W_f x_t + U_f h_{t-1} + b_f)     i = sigma(...)     o = sigma(...)
    g = tanh (W_c x_t + U_c h_{t-1} + b_c)
    c_t = f * c_{t-1} + i * g
    h_t = o * tanh(c_t)

### Gate matrix

All eight weight matrices form a single 256 x 104 matrix in one `mvau`:

* **Columns.** The 40 input weights come first, then the 64 recurrent weights.
* **Rows.** Row `4j + q` is gate `q` of hidden unit `j`, with q = 0 f,
  1 i, 2 g, 3 o.

With this order, a unit's four pre-activations leave the matrix unit back
to back. The element-wise stage can therefore finish a unit as soon as its
fourth gate arrives. It needs no buffer for the whole gate vector.

### One time step

1. The controller takes the 40 codes of x_t into `xbuf`.
2. It sends [x_t ; h_{t-1}] into the matrix unit as 26 four-element beats.
   The h_{t-1} part is read from `hbuf`.
3. Results stream out, and `lstm_cell` turns each unit's four
   pre-activations into c_t(j) and h_t(j). These are written back into
   `cbuf` and `hbuf`.

Overwriting `hbuf` during the step is safe. The matrix unit has already
buffered the whole input vector before its first result appears.

### Ordering and reset

The next step starts only after all 64 units are written back. This loop
is the sequential dependency that limits how far an LSTM can be
parallelised. Hidden and cell states start at zero for every sequence.
Only h_25 is sent on by default. `EMIT_ALL = 1` sends every h_t, which
corresponds to the "all hidden states" output of the source model.

### The element-wise stage (`lstm_cell`)

* **Gate activations.** The gate biases are folded into per-unit threshold
  tables: 63 thresholds for each sigmoid and 62 for tanh.
* **Cell update.** The products `f * c_{t-1}` and `i * g` are exact integers,
  and so is their sum.
* **Shared quantisers.** Three tables of 62 thresholds are shared by all
  units. They quantise the cell state, apply tanh to it, and quantise the
  hidden state `o * tanh(c_t)`.

Adding the two products as plain integers is correct only if they carry
the same scale. That holds when the three sigmoids share one quantiser
scale and the tanh gate's output scale equals the cell-state scale. This is
a condition on training, and the RTL relies on it. If a model breaks it,
one of the products must be requantised through an extra threshold stage
before the add. This design has no such stage.

## Interfaces

**Streams.** All streams use valid/ready; a beat moves on a clock edge where
both are high. Each stream carries one element per beat:

* `in_*`: INT8 features, 4000 per frame.
* `out_*`: signed 24-bit class scores, three per frame, in the order down,
  stationary, up. The predicted class is the largest score.

Once a beat is offered it is held until taken. An assertion in `mvau`
states this rule.

**Configuration port.** Weights and thresholds are loaded before any frame is
sent. The port `cfg` is a `cfg_wr_t` struct defined in `finngl_pkg`. It
carries `we`, `layer` (0-5 the convolutions in order, 6 the LSTM, 7-8 the
dense layers), `mem`, `addr` and `data`:

| layer           | `mem`                                  | `addr`                         |
|-----------------|----------------------------------------|--------------------------------|
| conv, dense     | `M_WEIGHTS`                            | row*MW + column                |
| conv, fc1       | any other value                        | channel*63 + k                 |
| LSTM            | `M_WEIGHTS`                            | (4j+q)*104 + column            |
| LSTM            | `M_THR_F`, `_I`, `_O` (63), `_G` (62)  | j*NT + k                       |
| LSTM            | `M_THR_C`, `_TC`, `_H`                 | k                              |

Values are truncated to the memory width. There is no read-back and no
protection against writing while a frame is in flight.

**Reset.** `rst_n` is an asynchronous active-low reset. It clears the
control state and the LSTM state; the memories keep their contents.

## Performance

With the default parameters, the full-size testbench measures 155,839
cycles from the first input beat to the last score of a frame. At 150 MHz
that is 1.04 ms, within the two-second decision window of the application
(ten book events of about 192 ms each). The source reports 4.3 ms for its
implementation.

All layers work at once, each on its own part of the stream. Per frame,
each layer is busy for about pixels x NF x max(SF, PE) cycles:

| layer   | cycles per frame |
|---------|------------------|
| conv1_1 | 72k              |
| conv1_2 | 144k             |
| conv1_3 | 72k              |
| conv2_1 | 36k              |
| conv2_2 | 36k              |
| conv2_3 | 9k               |
| LSTM    | under 10k        |
| dense   | under 1k         |

The slowest layer, conv1_2, sets the frame interval. The full-size
testbench streams two frames back to back and measures 146,883 cycles
between their last scores. That is about 1021 frames/s at 150 MHz, just
above the source's 1000 frames/s target. The testbench fails if the
interval exceeds 150,000 cycles.

Memory: about 100K 8-bit weights, 29.5K convolution and dense thresholds,
16.3K LSTM thresholds and about 0.1 Mbit of line buffers, all on chip.
Synthesis counts about 1.9 Mbit of memory arrays in all. The datapath has
743 small (7 x 8-bit) multipliers: PE x SIMD summed over the layers, plus
three in the LSTM cell. Timing at 150 MHz and the LUT count on the
source's Zynq UltraScale+ device have not been checked.

## Departures and open points

* **Parameter count.** The source quotes about 141K trainable parameters.
  The layer sizes it states give about 101K. The RTL follows the stated
  sizes.
* **Loading the weights.** The source compiles its trained weights into the
  hardware. Here they are loaded at run time through `cfg`, because no
  trained values are available.
* **Scale convention.** The unsigned sigmoid codes and signed tanh, cell
  and hidden codes, and the equal-scale condition of the cell add, are this
  design's conventions.
* **Quantiser count.** The source's LSTM has eleven internal quantisers.
  Here there are seven threshold stages. The weight and input quantisers
  are implicit in the integer codes, and the remaining ones are assumed
  folded into the neighbouring thresholds.
* **Stream protocol.** The streams are plain valid/ready. A host system
  would reach them through an AXI DMA, which adds the AXI-Stream naming
  and TLAST; that system is not part of this RTL.
* **No class decision.** The last layer returns raw scores. There is no
  softmax or arg-max in hardware.

## Files

`rtl/`:

| file                 | contents                                                      |
|----------------------|---------------------------------------------------------------|
| `finngl_pkg.sv`      | precisions, layer and memory selectors, configuration struct  |
| `multithreshold.sv`  | threshold-count activation                                    |
| `mvau.sv`            | folded matrix-vector unit with activation                     |
| `swg.sv`             | sliding-window generator                                      |
| `stream_dwc.sv`      | 1-to-SIMD stream packer                                       |
| `conv_layer.sv`      | `swg` + `mvau`                                                |
| `fc_layer.sv`        | `stream_dwc` + `mvau`                                         |
| `lstm_cell.sv`       | element-wise LSTM update                                      |
| `qlstm_layer.sv`     | LSTM layer with its recurrence loop                           |
| `convlstm_top.sv`    | the whole network                                             |

`tb/`: one self-checking testbench per module (`tb_<module>.sv`), plus:

* `tb_convlstm_full.sv`: the whole network at default size.
* `convlstm_ref_pkg.sv`: an integer reference model of the network, written
  apart from the RTL.

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with
a watchdog if the design hangs. Together they cover:

* exact results against direct computations;
* random input gaps and output stalls;
* fold latency in `tb_mvau`, frame latency in `tb_conv_layer`, and the
  frame interval at full size in `tb_convlstm_full`;
* zero padding and stride 2;
* LSTM recurrence, and state reset between sequences;
* clamping of activations at both ends of the code range.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_convlstm_top \
        -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/finngl_pkg.sv tb/convlstm_ref_pkg.sv tb/tb_convlstm_top.sv
    ./obj_dir/Vtb_convlstm_top

Replace `tb_convlstm_top` with any other testbench name. The full-size run
(`tb_convlstm_full`) takes a few seconds. The testbenches use only
`$urandom`, so results are repeatable. Sizes are changed through the
parameters of `convlstm_top`. The reduced test shows a consistent small
configuration. PE must divide each layer's channel count, and SIMD must
divide every fan-in except the first layer's.
