# Integer-only MLP accelerator for soft-sensor flow estimation

A soft sensor estimates a quantity that is hard to measure directly — here the
mass flow of drilling mud or waste water — from cheap indirect measurements:
three non-contact level sensors along an open channel. The estimator is a
small multi-layer perceptron (3 inputs, one hidden layer of H neurons with
ReLU, 1 output). This RTL runs that network on an FPGA with 8-bit integer
arithmetic only.

What distinguishes it from a plain fixed-point MLP is the number format.
Every tensor (sensor inputs, weights, hidden activations, output) is stored as
a signed 8-bit integer *q* that stands for the real value

    real = S * (q - Z)

with a scale *S* and a zero point *Z* chosen per tensor from the range the
tensor actually takes during training (linear, or affine, quantization). A
fixed-point format is the special case S = 2^-a, Z = 0; letting S and Z follow
the data wastes fewer of the 256 codes on values that never occur, which is
where the accuracy gain comes from. The cost is in the hardware: zero points
must be subtracted and the result must be rescaled by a factor that is not a
power of two. This design does both in a pipelined MAC datapath.

The design follows the FlowPrecision architecture (linear quantization for
FPGA soft sensors, Ling et al.) for the arithmetic, the block structure and the
published timing; the cycle-level schedule, the interfaces and all numeric
parameter values are this implementation's own (see *Departures and open
points*).

## The arithmetic

For one neuron *j* of a layer with *K* inputs, the real-valued computation
`a_j = SUM_k W_jk x_k + B_j` becomes, after substituting the affine forms and
collecting the real factors:

    q_a = (S_x S_w / S_a) * ( SUM_k (q_x,k - Z_x)(q_w,jk - Z_w) + B*_j ) + Z_a

* **Zero points are subtracted before the multiply.** Each operand becomes a
  9-bit signed difference (range -255..255); the product is 18 bits and the
  sum of up to 120 products plus a bias fits comfortably in 32 bits.
* **The bias is pre-scaled.** Biases have no zero point and are stored at the
  accumulator's scale S_x*S_w, `B* = round(B / (S_x S_w))`, so they simply seed
  the accumulator. They are therefore stored 32 bits wide.
* **The one real factor becomes a multiply and a shift.**
  `S_x S_w / S_a ≈ M0 * 2^-n` with a positive integer M0, so the rescaled
  output is `((sum * M0) >>> n) + Z_a`. The shift is arithmetic (rounds toward
  minus infinity) and the result is saturated to -128..127.
* **ReLU is a comparison with the zero point.** Real zero is code Z_a, so
  `ReLU` becomes `max(Z_a, q)`. Its output keeps the hidden layer's scale and
  zero point, so the output layer's input zero point is Z_a1 and no rescaling
  is needed between the layers.

The two layers differ only in their parameters:

| layer  | K | J | input zero point | weight zero point | output zero point | rescale |
|--------|---|---|------------------|-------------------|-------------------|---------|
| hidden | 3 | H | Z_X              | Z_W1              | Z_A1              | M0_1, n_1 |
| output | H | 1 | Z_A1             | Z_W2              | Z_Y               | M0_2, n_2 |

## Structure

```
             x_address/x                       a_address/a1 -> relu -> a2
 host input ------------> linear_layer (3->H) -------------------------> linear_layer (H->1) ---> y_address/y
  buffer                   |  param_rom W1, B1                              |  param_rom W2, B2
                           |  mac_pipeline, requantizer                     |  mac_pipeline, requantizer
                           |  output_buffer A1 (H words)                    |  output_buffer Y (1 word)
```

`flowprec_mlp` (top) chains two `linear_layer`s with a `relu` in between.
Each layer holds its weights and biases in two `param_rom`s, computes with
one `mac_pipeline` and one `requantizer`, and writes its results into its own
`output_buffer`. The next stage reads that buffer by address; the ReLU sits
combinationally on the read-data path, so it costs no cycle. The sensor
vector is read the same way from a buffer outside the accelerator, and the
flow estimate is read out of the output layer's buffer.

| file | contents |
|------|----------|
| `rtl/flowprec_pkg.sv` | widths (8-bit data, 32-bit accumulator), types, placeholder-content hash |
| `rtl/param_rom.sv` | synchronous ROM, contents from a hex file or placeholder formula |
| `rtl/mac_pipeline.sv` | 3-stage subtract / multiply / accumulate |
| `rtl/requantizer.sv` | `(sum*M0) >>> n + Z`, saturated, one register stage |
| `rtl/output_buffer.sv` | 1-write / 1-read synchronous RAM |
| `rtl/relu.sv` | `max(Z_A, x)`, combinational |
| `rtl/linear_layer.sv` | controller and datapath of one layer |
| `rtl/flowprec_mlp.sv` | the network (top) |

## Schedule and latency

A layer processes its neurons one after another. With *t* counting cycles
from the start of neuron *j*:

| t | what happens |
|---|--------------|
| 0 .. K-1 | addresses of x[t] and W[j][t] issued (and B*[j] at t = 0) |
| 1 .. K | words arrive, zero points subtracted (stage 1) |
| 2 .. K+1 | products formed (stage 2) |
| 3 .. K+2 | products accumulated; the bias seeds the accumulator with the first |
| K+3 | sum complete; rescaled, Z added, saturated |
| K+4 | result written to Y[j] |

One neuron therefore takes K+5 cycles; inside a neuron the pipeline accepts a
new input pair every cycle. A whole layer takes J(K+5) cycles plus one to
leave idle. For the 3-H-1 network:

    hidden layer:  H * (3 + 5) + 1
    output layer:  1 * (H + 5) + 1
    total:         9H + 7 cycles from the clock edge that samples enable high to done

At 100 MHz that is 0.97, 2.77, 5.47 and 10.87 µs for H = 10, 30, 60, 120.
The published M-Linear implementation measured 1.01, 2.81, 5.51 and 10.91 µs,
i.e. 9H + 11 cycles: the slope of 9 cycles per hidden neuron is reproduced
exactly (it is what fixed the schedule above); the remaining constant of 4
cycles is not accounted for by the published description and is probably
spent in the interface around the accelerator. Even the largest model is
about ten times faster than the 10 kHz sampling rate of the sensor data.

## Interface and handshake

`flowprec_mlp` ports (all synchronous to `clk`):

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `enable` | in | 1 | hold high for one inference |
| `done` | out | 1 | inference finished; stays high while `enable` is high |
| `x_address` | out | 2 | which sensor reading the accelerator wants |
| `x` | in | 8 | the reading at the `x_address` of the previous cycle |
| `y_address` | in | 1 | output index (0) |
| `y` | out | 8 | the estimate at the `y_address` of the previous cycle |

To run an inference: put the three quantized readings in a buffer with a
one-cycle read, raise `enable`, wait for `done`, read `y` one cycle after
presenting `y_address = 0`, then drop `enable` for at least one cycle. The
output buffers keep their contents while idle. Dropping `enable` before
`done` aborts the inference: the controllers return to idle and the datapath
pipelines are flushed, so the next inference starts clean. The output layer's
`enable` is the hidden layer's `done`, which is how the two layers are
sequenced.

`linear_layer` has the same enable / done / x_address / x / y_address / y
interface, so layers can be chained for deeper networks.

## Loading a trained model

All numeric parameters are top-level parameters of `flowprec_mlp`:

* `Z_X`, `Z_W1`, `Z_A1`, `Z_W2`, `Z_Y` — zero points of the input, the two
  weight tensors, the hidden activation and the output;
* `M0_1`, `N_SHIFT_1`, `M0_2`, `N_SHIFT_2` — the two rescale factors, with
  `M0 = round(S_in S_w / S_out * 2^n)`; choose the largest n that keeps M0
  below 2^31;
* `W1_INIT_FILE`, `B1_INIT_FILE`, `W2_INIT_FILE`, `B2_INIT_FILE` — hex files
  for `$readmemh`, one word per line: weights as two hex digits (two's
  complement), neuron-major (`W[j][k]` at line `j*K + k`); biases as eight hex
  digits, `B* = round(B / (S_in S_w))`.

With empty file names the ROMs hold placeholder values from a fixed integer
hash (`flowprec_pkg::gen_word`): 8-bit weights and 14-bit biases. The default
zero points and M0/n are likewise placeholders of plausible magnitude (inputs
normalised to 0..1 give Z_X = -128; rescale factors around 1/300 and 1/400,
chosen so that the placeholder network exercises both ReLU branches and
occasional saturation while its estimates stay in range). They make the
design runnable and testable, not a working flow estimator.

A fixed-point (a,8) layer — scale 2^-a, no zero point — is the special case
of all zero points 0 and `M0 = 1, n = a` when input, weights and output share
the format, so either layer can be switched to fixed point through its
parameters alone.

A model with fewer hidden neurons than `HIDDEN` can run on a larger
instance: give the unused neurons output weights equal to `Z_W2` and they
contribute nothing. Set `HIDDEN` to the model's size to get its latency.

## Verification

Each block has a self-checking testbench in `tb/` that compares against an
independent integer model in `tb/tb_ref_pkg.sv` (plain 64-bit arithmetic,
floor division instead of shifts):

| testbench | what it checks |
|-----------|----------------|
| `tb_relu` | all 256 inputs, two thresholds |
| `tb_requantizer` | random and extreme sums, both saturation directions, one-cycle latency |
| `tb_mac_pipeline` | 300 random dot products of length 1..10, back to back and with gaps, 3-cycle latency |
| `tb_output_buffer` | fill / read back, read-before-write on collisions |
| `tb_param_rom` | placeholder contents, a hex-file ROM (`tb/tb_param_rom.hex`), synchronous read |
| `tb_linear_layer` | K = 5, J = 6 layer: latency J(K+5)+1, all outputs, aborts |
| `tb_flowprec_mlp` | full-size network (H = 120, default parameters): 30 inferences on sensor-like and random inputs, latency 1087 cycles, abort and restart, ReLU clamping and saturation both exercised |
| `tb_flowprec_workloads` | networks with H = 10, 30, 60, 120 and an all-fixed-point (6,8) network with H = 10: 20 inferences each, latency 9H + 7 |

Each testbench prints `TB_RESULT checks=N failures=M`. To run one with
Verilator from the repository root (the ROM test reads its hex file by a
path relative to it):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_flowprec_mlp \
    -y rtl -y tb +libext+.sv rtl/flowprec_pkg.sv tb/tb_ref_pkg.sv tb/tb_flowprec_mlp.sv
./obj_dir/Vtb_flowprec_mlp
```

The full-size test simulates in well under a second.

What the tests do not establish: agreement with a real trained model (no
trained parameters are available), timing closure at 100 MHz on an FPGA, and
the resource figures below.

## Departures and open points

* **Schedule.** The published text says the load of a neuron (fetch of
  W[j][0], x[0], B[j], bias accumulation) and the rescale-and-store of a
  neuron run "in a single clock cycle even though they are in distinct
  stages". Here rescale and store are two successive cycles and neurons do
  not overlap; a tighter schedule would save cycles per neuron but would no
  longer match the 9 cycles per hidden neuron of the published timing.
* **Saturation.** The published algorithm ends with `y = (sum*M0) >> n; Y[j] =
  y + Z_Y` and does not say what happens outside -128..127; this design
  saturates, as the quantization mapping itself clamps.
* **Rounding.** The shift truncates toward minus infinity; no rounding
  constant is added.
* **Widths.** 32-bit accumulator and biases and a 31-bit M0 are this design's
  choice; only the 8-bit tensor width is specified.
* **Latency constant.** 9H + 7 cycles here versus 9H + 11 in the published
  measurements (see above).
* **Interfaces, reset and abort** are this design's own.
* **Precision.** All tensors are 8 bits, the configuration evaluated in the
  published work. The width is one constant (`DATA_W` in `flowprec_pkg`) for
  the whole design; per-tensor mixed precision is not provided.
* **Resources.** The published M-Linear design uses 2 DSP slices in every
  configuration — one per layer for the M0 multiplication — and 0 to 1.5 block
  RAMs. This design has, per layer, one 32x31-bit multiplier in the
  requantizer and one 9x9-bit multiplier in the MAC; on a Xilinx part the small
  one would normally go to LUTs, giving the same two DSPs. The ROMs and buffers
  are written as plain arrays and left to the synthesis tool to place in block
  or distributed RAM.
