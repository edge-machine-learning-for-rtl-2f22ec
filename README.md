# Edge cluster counting for drift chambers: a fully parallel fixed-point regression network

A drift chamber measures particle identity best when, instead of summing the
charge a track deposits in a cell (dE/dx, which suffers from Landau tails), it
counts the *primary ionisation clusters* along the track (dN/dx, which is close
to Poisson distributed). Counting clusters needs the sense-wire signal sampled
finely (here 1.5 GS/s), and shipping every sampled waveform off the detector
would approach terabytes per second. The idea implemented here is to do the
counting in the front end: a small neural network reads the first 500 samples
of one cell's waveform and outputs a single number, the estimated number of
primary clusters, so that only that number has to leave the detector.

This repository gives synthesizable SystemVerilog for that network as described
in *Edge Machine Learning for Cluster Counting in Next-Generation Drift
Chambers* (Yilmaz, Wu, Gonski, Rankin, Herwig): a dense network
500 → 8 → 32 → 8 → 1 with ReLU on the hidden layers, 10-bit fixed-point numbers
with 5 fractional bits, and every multiplication done in parallel so that a new
waveform can be accepted on every clock. The paper evaluates the network as an
hls4ml-generated FPGA design and publishes its topology, number format and
latency, but neither its trained weights nor its hardware internals; everything
below the level of "a fully parallel dense layer" is this design's own, and is
marked as such.

## The network

| layer | inputs | neurons | weights | activation | output format |
|-------|-------:|--------:|--------:|------------|---------------|
| 1     | 500    | 8       | 4000    | ReLU       | signed 10 bit, 5 fractional |
| 2     | 8      | 32      | 256     | ReLU       | signed 10 bit, 5 fractional |
| 3     | 32     | 8       | 256     | ReLU       | signed 10 bit, 5 fractional |
| out   | 8      | 1       | 8       | none       | signed 16 bit, 5 fractional |

In total 4,520 weights and 49 biases, all in the signed 10-bit format with 5
fractional bits (range −16 … +15.96875, step 1/32). Input samples use the same
format; a typical waveform (amplitudes from about −0.05 to 1.3 in the units of
the simulated data) occupies a few dozen codes of it.

The weights are the result of training on simulated waveforms and are not
published, so the top level takes them as input ports (`w1`…`w4`, `b1`…`b4`).
They are meant to be tied to constants or to a configuration register bank and
must not change while waveforms are in flight. A pruned model (the paper also
evaluates one with 60 % of its weights removed) runs on the same hardware with
those weights set to zero; a synthesis tool given constant zero weights removes
the corresponding multipliers.

## Arithmetic: where precision is kept and where it is dropped

This is the part of the design that decides whether it reproduces a trained
quantised model bit for bit, so it is spelled out exactly. For each neuron `j`
of a layer with inputs `x[i]`, weights `w[j][i]` and bias `b[j]`, all integers
standing for value/32:

1. Each product `x[i]*w[j][i]` is formed exactly: 20 bits, 10 fractional bits.
2. The products are summed exactly; the adder tree grows to
   `20 + ceil(log2(N_IN))` bits (29 bits for the 500-input layer), so nothing
   can overflow inside a layer.
3. The bias is aligned to 10 fractional bits (`b[j] << 5`) and added; one more
   bit of width.
4. The sum `s` is requantised to 5 fractional bits by an arithmetic right shift
   of 5, i.e. `floor(s / 32)`: **truncation towards minus infinity**.
5. The result is **saturated** to the layer's output width (10 bits for hidden
   layers: 0 … 511 after ReLU; 16 bits for the output).
6. Hidden layers apply **ReLU**: a negative `s` gives 0.

Steps 4 and 5 are choices: the paper states the format, not the rounding or
overflow behaviour. Truncation matches the default of the fixed-point types
hls4ml generates; saturation was chosen over wrap-around because a wrapped
activation turns a large positive value into a large negative one. If a trained
model used round-to-nearest or wrap-around, `relu_quant.sv` is the one place to
change.

The output layer keeps 16 bits instead of 10. In the 10-bit format the largest
value is 15.97, while the data have a mean of 12.5 clusters per waveform with a
tail well above 16, so the regression output would clip often. The paper does
not give the output width.

## Pipeline and timing

Each dense layer is three kinds of stage:

* a register bank holding all `N_OUT × N_IN` products (one multiplier per weight);
* one adder tree per neuron, adding pairs level by level, with a register bank
  after every fourth level (`LEVELS_PER_STAGE = 4`) except the last;
* the bias add, requantisation and ReLU, registered at the layer output.

A layer with `N` inputs therefore takes `2 + floor((ceil(log2 N) − 1) / 4)`
cycles:

| layer | adder levels | tree registers | latency (cycles) |
|-------|-------------:|---------------:|-----------------:|
| 1 (500 → 8) | 9 | 2 | 4 |
| 2 (8 → 32)  | 3 | 0 | 2 |
| 3 (32 → 8)  | 5 | 1 | 3 |
| out (8 → 1) | 3 | 0 | 2 |
| **total**   |   |   | **11** |

The paper reports 55 ns for the quantised network and does not state a clock.
At 200 MHz (the usual hls4ml default period of 5 ns) the 11 cycles here are
55 ns; that correspondence was the reason for putting the registers where they
are. Nothing ever stalls: the network has an initiation interval of one, so a
waveform can be presented on every clock and its count appears exactly 11 clocks
later. The pruned model's 45 ns in the paper comes from a netlist in which the
pruned multipliers disappear at compile time; with weights as ports, pruning
does not shorten this pipeline.

Only the valid bits are reset (`rst_n`, synchronous, active low). The data
registers are not reset; their contents matter only when the matching valid bit
is set.

## Interface of the top level, `cluster_count_dnn`

| port | dir | type | meaning |
|------|-----|------|---------|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | synchronous active-low reset of the valid pipeline |
| `in_valid` | in | 1 | `samples` holds a waveform this cycle |
| `samples[500]` | in | `fx_t` | the waveform, signed 10 bit, 5 fractional |
| `w1[8][500]`, `b1[8]` | in | `fx_t` | layer 1 weights and biases |
| `w2[32][8]`, `b2[32]` | in | `fx_t` | layer 2 |
| `w3[8][32]`, `b3[8]` | in | `fx_t` | layer 3 |
| `w4[8]`, `b4` | in | `fx_t` | output layer |
| `out_valid` | out | 1 | `cluster_count` is valid (`in_valid` delayed by 11) |
| `cluster_count` | out | `cnt_t` | estimated number of clusters, signed 16 bit, 5 fractional |

Weight indices are `[neuron][input]`. The front end that samples the wire at
1.5 GS/s and gathers 500 samples into `samples`, and the link that carries
`cluster_count` off the detector, are not part of this design; the paper does
not describe them.

## Files

| file | content |
|------|---------|
| `rtl/ccnn_pkg.sv` | formats (`fx_t`, `cnt_t`), layer sizes, adder-tree depth and latency functions |
| `rtl/relu_quant.sv` | requantisation: floor shift, saturation, optional ReLU (combinational) |
| `rtl/adder_tree.sv` | pipelined signed adder tree, registers every `LPS` levels |
| `rtl/dense_layer.sv` | fully parallel dense layer: products, one tree per neuron, bias, activation |
| `rtl/cluster_count_dnn.sv` | the four layers chained: the complete network |
| `tb/tb_relu_quant.sv` | corner and random values against an integer reference |
| `tb/tb_dense_layer.sv` | two small layer configurations, random streams, latency and throughput |
| `tb/tb_cluster_count_dnn.sv` | full-size network end to end, dense and pruned weights |

## Verification

Every testbench compares the design with an integer reference written
independently in the testbench (sums of products, `floor(s/32)`, clamping,
ReLU) and prints `TB_RESULT checks=N failures=M`.

* `tb_relu_quant` drives both the hidden-layer (10-bit, ReLU) and the output
  (16-bit, linear) settings with values around zero and around both saturation
  limits, then 4,000 random values; it requires ReLU clipping and positive and
  negative saturation to occur.
* `tb_dense_layer` runs a 20-input, 5-neuron ReLU layer with two adder levels
  per stage (latency 4) and a 7-input, 3-neuron linear layer with one level per
  stage (latency 4), 600 vectors each, mostly back to back with random idle
  cycles. It checks every output, its latency and that no result is lost or
  duplicated.
* `tb_cluster_count_dnn` runs the network at its full default size. It
  generates drift-cell-like waveforms (noise of a few codes plus 2 to 40
  pulses with fast rise and exponential tail, up to about 1.3 in amplitude), uses
  random weights (one first-layer neuron all positive and one all negative, so
  that saturation and ReLU clipping both happen), and sends 48 waveforms with
  dense weights and 48 with the 60 % smallest weights zeroed. It checks every
  count bit for bit and its 11-cycle latency, and requires at least one
  occurrence each of hidden-layer ReLU clipping, hidden-layer saturation,
  back-to-back waveforms, idle gaps, negative outputs and outputs above the
  10-bit range. Building it takes about 20 s; it runs in well under a second.

The weights are random, not trained, so the tests show that the hardware
computes the specified fixed-point network exactly, not that it counts clusters
well; that depends on weights trained and quantised with the same arithmetic.

To run a test with plain Verilator, from the repository root:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/ccnn_pkg.sv tb/tb_cluster_count_dnn.sv --top-module tb_cluster_count_dnn
./obj_dir/Vtb_cluster_count_dnn
```

(substitute `tb_dense_layer` or `tb_relu_quant` for the other tests).

## Cost

The first layer dominates: 4,000 10×10-bit multipliers and eight 500-input
adder trees, against 520 multipliers for the other three layers together. The
product registers alone are 4,520 × 20 bits. This is the price of accepting a
waveform every clock. The paper's FPGA mapping of the same network needed about
83k LUTs and 22k flip-flops. If waveforms arrive less often than once per clock,
the multipliers of layer 1 could be time-shared, but the paper does not describe
such a variant and this design does not provide it.

## Changing the design

* Sizes: `N_IN`, `N1`, `N2`, `N3` on `cluster_count_dnn` (defaults from
  `ccnn_pkg`). Latency follows automatically from `layer_latency()`.
* Pipeline depth: `LPS` (adder levels per clock). Smaller values raise the
  clock rate and the latency; larger values do the opposite.
* Number format: `FX_W`, `FX_FRAC` and `CNT_W` in `ccnn_pkg`.
* Rounding and overflow: `relu_quant`.
* If the weights are fixed at design time, replace the weight ports with
  constants; synthesis then removes the multipliers of zero (pruned) weights.
