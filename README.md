# A precomputed 1D-CNN for atrial-fibrillation detection

This design detects atrial fibrillation (AF) in an ECG window. Its network
contains no multiplier and no adder. Every layer of the 1D convolutional
network is replaced by the complete table of its outputs. That works because all activations between
layers are binary (+1/-1). A block that sits between two binarizations and
sees `n` input bits is then a fixed Boolean function of `n` bits: it can be
precomputed offline and stored as a truth table. An FPGA implements such a
table directly in its look-up tables. What remains in hardware is
table look-ups, the shift registers that give each table the time steps it
needs, and a little control logic.

The hard part is keeping `n`, the *fan-in*, small. A table has `2^n` entries,
so a dense convolution with kernel 6 over 12 binary channels (72 bits) is out
of reach. The network therefore uses **Split Convolutional Blocks**. Each
dense convolution becomes two grouped convolutions:

* **alpha**: kernel `k0`, input channels split into `g_a` groups. Each group's
  table sees `k0 * c / g_a` bits.
* **beta**: pointwise (kernel 1), its input split into `g_b` groups. Each
  table sees `f_a / g_b` bits.

Each of the two is followed by batch norm and binarization, and each is one
precomputed block. With the configuration built here, (12, 10, 12, 12, 1, 1, 12) for
the first block and (12, 6, 12, 12, 1, 1, 12) for the others, alpha is
depthwise: twelve tables of 10 or 6 bits. Beta is a single 12-bit table with
12 outputs. Written in this README and in the sources, a split configuration
is `(c_a, k_a, g_a, f_a, k_b, g_b, f_b)`.

## The network

One inference takes a window of `N_SAMPLES` 12-bit ECG samples at 125 Hz
(default 5000 samples, 40 s):

| stage | what it is | table(s) | time steps out (5000 in) |
|---|---|---|---|
| `input_binarizer` | conv k=1, 1 -> 12 channels, bnorm, bin | one 12-in/12-out | 5000 |
| block 0 alpha | depthwise conv k=10 | 12 x (10-in/1-out) | 4991 |
| block 0 beta | pointwise conv 12 -> 12 | 1 x (12-in/12-out) | 4991 |
| pool 0 | max pool, window 8, stride 6 | per-channel OR/AND | 831 |
| blocks 1..3 alpha | depthwise conv k=6 | 12 x (6-in/1-out) | 826, 407, 198 |
| blocks 1..3 beta | pointwise conv 12 -> 12 | 1 x (12-in/12-out) | |
| pools 1..3 | window 3, stride 2 | per-channel OR/AND | 412, 203, 98 |
| `linear_sigmoid` | linear 12 -> 1, sigmoid | one 12-in/8-out | 98 |

The output is one 8-bit probability per remaining time step: 98 values for a
5000-sample window. The MSB of each value is the decision (>= 0.5).

### Why pooling comes after binarization

During training the pool sits between the second convolution and its batch
norm. That order trains better, but it would put the convolution and the pool
into one table and multiply its fan-in. Batch norm and binarization are
monotonic, so the pool can be moved behind the binarization without changing
any result. Max is preserved for channels whose batch-norm scale `gamma` is
positive. For channels with negative `gamma` it turns into a min, expressed as
"negate, max, negate". On binary values max is an OR of the window and the
negated form is an AND. So `binary_maxpool` computes, per channel,

    y_c = INV[c] ? AND(window_c) : OR(window_c)

`INV` is the mask of channels with negative `gamma` in the beta layer in
front of the pool. This is the only place where the trained `gamma` signs
appear in the hardware.

### Streaming and timing

The pipeline is fully streaming, without back-pressure. Every layer has a
`valid` input. It shifts its window register only on valid data. It emits an
output when a window is complete: every input for a stride-1 convolution
after the first `K-1`, and every `S`-th input for a pool after the first `P`.
Each layer registers its output, so:

* alpha and beta each add 1 clock, a pool adds 1, and the input and output
  layers add 1 each. That makes 14 clocks from the sample that closes the
  last window to the output.
* A `clear` pulse empties all windows before a new window is streamed. No
  data is padded, and no state leaks between inferences.

The sequencer feeds one sample per clock. One inference takes 1 clock
(clear) + `N_SAMPLES` clocks + a short drain: 5004 clocks for 5000 samples.
The trailing samples of a 5000-sample window fall outside the last pooling
window, so the drain is short.

## The accelerator around the network

```
 MCU --SPI--> spi_slave <-> host_if --write--> sdp_ram (input, 5000 x 12)
                              |  ^                  | 1 sample / clock
                         start|  |status       accel_ctrl --> pcnn_network
                              v  |                                 |
                      accel_ctrl  +--read-- sdp_ram (output, 98 x 8) <--+
```

* **SPI** (`spi_slave`): mode 0, MSB first. All pins are oversampled by the
  system clock, so the design has one clock domain. SCLK must be at most
  clk/8.
* **Commands** (`host_if`, codes in `pcnn_pkg::cmd_e`). Each frame starts
  with a command byte:
  * `0x01` write samples: `addr_hi addr_lo` then `{4'b0,s[11:8]} s[7:0]` per
    sample, with the address auto-incrementing.
  * `0x02` start.
  * `0x03` status: the next byte returns `{6'b0, busy, done}`.
  * `0x04` read results: `addr_hi addr_lo`, then one result per byte.

  The first byte shifted out in every frame is also the status byte.
* **Sequencer** (`accel_ctrl`): ignores a start while it is busy. `done` is a
  pin and a status bit, and stays high until the next start. The parameter
  `REPEAT` runs several inferences per start, so that compute time can be
  measured without the SPI transfer (default 1).

## Where the table contents come from

The trained weights of the original network are not published, so the
tables here are placeholders. They are generated at elaboration time from
small integer weights given by a hash, `pcnn_pkg::weight(seed, layer, out,
in)`, which returns values in [-8, 7]. The formulas are:

* convolution output `o`: `bin(b_o + sum_j (x_j ? w_oj : -w_oj))`. Input bit
  `j = t*S_IN + i` is channel `i` of the group at tap `t`, where `t = 0` is
  the oldest time step.
* input layer: `bin(w_c * (x - 2048) + 256 * b_c)` for the unsigned ADC code
  `x`.
* output: `clamp(128 + 8*z, 0, 255)` with `z` the linear sum, a hard sigmoid.
* `gamma` sign of channel `c`: the sign of one more hashed value.

To load a trained network, replace `pcnn_pkg::weight` and
`pcnn_pkg::gamma_neg` with the trained values, or pass `TABLE` parameters
computed elsewhere to `truth_table`. The hardware structure does not change.
The tables are assembled 64 bits at a time, with weighted sums split into
low and high address halves. This keeps elaboration of the four 4096 x 12
tables to seconds in the usual tools.

## Files

| file | contents |
|---|---|
| `rtl/pcnn_pkg.sv` | sizes, weight hash, sequence-length functions, command codes |
| `rtl/truth_table.sv` | constant table look-up |
| `rtl/input_binarizer.sv` | first layer (12-bit sample -> 12 bits) |
| `rtl/precomputed_conv.sv` | grouped conv + bnorm + bin as window + tables |
| `rtl/split_conv_block.sv` | alpha + beta |
| `rtl/binary_maxpool.sv` | pooling with sign inversion |
| `rtl/linear_sigmoid.sv` | output layer |
| `rtl/pcnn_network.sv` | the whole network |
| `rtl/sdp_ram.sv` | input and output buffers |
| `rtl/spi_slave.sv`, `rtl/host_if.sv` | host interface |
| `rtl/accel_ctrl.sv` | sequencer |
| `rtl/af_accelerator.sv` | top |
| `tb/*_tb.sv` | one self-checking testbench per module |
| `tb/tb_ref_pkg.sv` | reference network computed from the weights, no tables; synthetic ECG generator |
| `tb/spi_master_bfm.sv` | SPI master standing in for the MCU |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog ends it if it hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/pcnn_pkg.sv tb/tb_ref_pkg.sv tb/af_accelerator_full_tb.sv \
  --top-module af_accelerator_full_tb -o sim && obj_dir/sim
```

* `af_accelerator_full_tb` runs one inference at the default size through
  the SPI pins. It checks all 98 results against the reference and the clock
  count (5004).
* `af_accelerator_tb` uses 1000-sample windows and `REPEAT = 2`. It covers
  the repeated-inference mode, a start while busy, status polling and
  two different windows in a row, which shows that nothing carries over
  from one inference to the next.
* `pcnn_network_tb` checks the network alone, including the 14-clock
  latency of every output. It checks both the main shape and the `C0 = 10`
  shape.

The block testbenches check each layer against the weight-level reference.
This covers several table shapes, among them a grouped split (6, 2, 3, 6, 1,
2, 2) in which neither convolution is depthwise or dense.

Elaboration takes around 10-30 s per tool for modules that contain the
12-input tables, because the tables are computed by constant functions.

## Departures and open points

* **Window length.** The training windows are "about 42 s" at 125 Hz, which
  would be 5250 samples. The reported inference time of about 5,085 clocks,
  at one clock per sample, is only possible for at most about 5085 samples.
  The default of 5000 samples follows the clock count. `N_SAMPLES` is a
  parameter of the top.
* **Clock count.** This design takes 5004 clocks for 5000 samples. The
  original reports 5,085 clocks from simulation. The difference lies in the
  window length and in control overhead that is not published.
* **Output.** The network's last layer is a linear layer of kernel size 1
  followed by a sigmoid, and there is no global pooling. How the per-step
  outputs become one label is not stated. Here all 98 probabilities are
  stored and the host decides, for example by majority or mean.
* **Sigmoid format.** The 8-bit hard sigmoid is this design's choice. Any
  monotone quantisation gives the same decision bit.
* **Pooling as logic.** Pooling is written as OR/AND rather than as a stored
  P-input table. The function is the same, and synthesis produces the same
  LUTs.
* **Other network sizes.** The top is built with the main network. The
  channel count after the first block (`C0`, 6 to 12 in the original
  experiments) and the group counts are parameters of `pcnn_network`. The
  input layer keeps 12 channels (`C_IN0`). `pcnn_network_tb` runs a second
  instance shaped like the smaller published network: `C0 = 10`, with beta
  in two groups. That network's first block is printed with a beta kernel
  of 12, which contradicts the rule that beta is pointwise. Kernel 1 is used
  instead.
* **Not in the RTL.** The offline tool flow: training, the split-configuration
  search with its connectivity score, the LUT cost model, and table
  generation for trained weights. The mapping of tables onto 6-input LUTs is
  left to synthesis.
* **Interface.** The SPI protocol, the buffer formats, the `clear`/`valid`
  handshake and the reset behaviour are all this design's own.
