# SNAP-gate pulse-parameter network in SystemVerilog

A microwave-cavity qudit is controlled through an ancilla transmon. Its
Selective Number-dependent Arbitrary Phase (SNAP) gate shifts the phase of one
cavity level by an angle α. The optimal drive for a given α is found offline
by numerical optimal control. That optimiser is far too slow to run while an
experiment is going on. This design replaces it with a small, quantized
multilayer perceptron (MLP) in programmable logic. The MLP reads α and returns
the 32 coefficients of the drive pulse: 16 quadratic B-spline coefficients for
the in-phase drive I(t) and 16 for the quadrature drive Q(t). The pulse lasts
290 ns. At the intended 3.225 ns clock the network answers in 10 clocks
(about 32 ns) and accepts a new angle on every clock.

The RTL follows the network described in "Fast Machine Learning for Quantum
Control of Microwave Qudits on Edge Hardware" (Sanders et al.). That work
trained the network, quantized it and generated hardware with an HLS tool.
This RTL is written by hand from the published description and is not the
authors' code. The trained weights were not published, so the network loads
them at run time.

## The network

Ten fully connected layers, one input (α), 32 outputs:

| layer | inputs | nodes | weights + biases | activation |
|------:|-------:|------:|-----------------:|------------|
| 1     | 1      | 8     | 16               | ReLU       |
| 2–6   | 8      | 8     | 72 each          | ReLU       |
| 7     | 8      | 16    | 144              | ReLU       |
| 8–9   | 16     | 16    | 272 each         | ReLU       |
| 10    | 16     | 32    | 544              | none       |

That makes 1608 parameters in total. Output node p of layer 10 is I
coefficient p for p < 16, and Q coefficient p − 16 otherwise.

## Number formats: where the bits go

This is the part that takes most care when changing the design. Every value
is two's-complement or unsigned fixed point, and no floating point is used.

| quantity | format (defaults) | range |
|---|---|---|
| α (input) | signed 16 bits, 13 fractional (`IN_W`, `IN_F`) | ±4 rad, so ±π fits |
| weights, biases | signed `QBITS` = 5 bits, 4 fractional, no integer bit | [−1, 15/16] |
| activations | unsigned 5 bits, all 5 fractional | [0, 31/32] |
| layer results, outputs θ | signed 16 bits, 6 fractional, settable per layer (`RES_W_L`, `RES_F_L`) | [−512, 512) |

A layer computes the following for every node j:

1. **Exact accumulation.** It forms `acc = b[j]·2^Xf + Σ x[i]·w[j][i]` in a
   register wide enough never to overflow. `Xf` is the input's fraction
   (13 for layer 1, 5 after that). The bias is shifted left so that its
   binary point lines up with the products' binary point, at `Xf + 4` bits.
2. **Result type.** It drops `Xf + 4 − 6` fractional bits by truncation
   (round toward −∞), then keeps the low 16 bits. Anything out of range
   wraps around. These are the default rules of the HLS fixed-point type
   that the original flow used. With 5-bit parameters, wrap-around cannot
   happen in this network, because the largest possible result is far
   inside the range. It can happen once a layer's result type is narrowed.
   The top takes one result type per layer (`RES_W_L[k]` bits, `RES_F_L[k]`
   fractional), because the precision was tuned layer by layer in the
   original flow. A result type with fewer than 6 fractional bits changes
   the step above and the ReLU rounding below accordingly.
3. **Quantized ReLU** (layers 1–9). A negative result becomes 0. Otherwise
   the 6-bit fraction is rounded to 5 bits, with halves rounding up, and
   anything at or above 1.0 becomes 31/32.

Here is a hidden-layer example with all inputs equal to 16/32 (code 16),
all weights equal to 8/16 (code 8), and bias −4/16 (code −4). Then
`acc = −4·32 + 8·(16·8) = 896`, with 9 fractional bits.
The result is `896 >> 3 = 112`, which is 1.75 with 6 fractional bits.
The ReLU saturates it to code 31.

## Pipeline, handshakes and timing

Each layer is an `mlp_layer` stage with a valid/ready handshake on both sides:

```
alpha ─► [L1] ─► [L2] ─► ... ─► [L10] ─► theta_i / theta_q
          ▲        ▲              ▲
          └────────┴── parameter bus (param_we, param_addr, param_data)
```

A transfer happens on a rising clock edge when both valid and ready are
high. A stage holds its result until the next stage takes it. A stall at
`theta_ready` therefore backs up the pipeline without losing data. The
assertions in `dense_layer` check that a held result stays unchanged.

`REUSE` sets how many clocks share each multiplier. It is a top-level
parameter with default 1:

* **REUSE = 1** (default): every layer has one multiplier per weight, 1592
  small multipliers in all. An angle taken at edge t gives its coefficients
  at edge t + 10, and the pipeline accepts a new angle on every edge.
* **REUSE = R > 1**: a layer with N inputs uses N/R of them per clock and
  has 1/R of the multipliers. This applies to every layer whose input count
  R divides, which rules out the one-input first layer. An empty pipeline
  answers after 1 + 9R clocks and accepts one angle per R clocks. When
  loaded, an angle can wait up to R − 1 more clocks in the first layer.

The published work targeted a 3.225 ns clock period with an area-oriented
synthesis strategy, but it did not state a reuse factor. Its reported LUT
usage is tens of percent of a large FPGA, which points to a mostly unrolled
design, hence the default of 1. Timing closure at 3.225 ns has not been
checked for this RTL. Each stage has one multiply-add tree plus the
requantization in a single clock, so a fast clock may need extra pipeline
registers.

## Loading parameters

The 1608 weights and biases share one flat address space, 11 bits wide, with
one write per clock. Layer k starts at the sum of the parameter counts of the
layers before it: 0, 16, 88, 160, 232, 304, 376, 520, 792 and 1064. Within a
layer, weight w[j][i] (node j, input i) is at `base + j·N_in + i`. The
biases follow at `base + N_in·N_out + j`. Each value is the signed 5-bit code,
that is, the real value times 16. Reset clears all parameters to zero. Load
the parameters while the network is idle, because a write takes effect
immediately. `qctl_pkg` provides `param_base(k)`, `layer_inputs(k)` and
`TOTAL_PARAMS`.

## Files

| file | contents |
|---|---|
| `rtl/qctl_pkg.sv` | layer sizes, default formats, address-map functions |
| `rtl/param_bus_if.sv` | the parameter write bus (we, addr, data) |
| `rtl/param_store.sv` | one layer's weight and bias registers, decoded from the bus |
| `rtl/dense_layer.sv` | multiply-accumulate, bias, result-type conversion, REUSE sequencing, handshake |
| `rtl/relu_quant.sv` | quantized ReLU (clamp, round, saturate) |
| `rtl/mlp_layer.sv` | one layer stage: store + dense + optional ReLU |
| `rtl/snap_mlp_top.sv` | the ten-stage network with plain ports |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus two end-to-end ones |
| `tb/dense_layer_harness.sv` | random-stream checker used by `tb_dense_layer` |

## Relation to the published design

Taken from the publication:

* the topology (Table 6 of the paper: 8, 8, 8, 8, 8, 8, 16, 16, 16, 32 nodes);
* one angle in and 16 + 16 spline coefficients out;
* ReLU activations;
* weights, biases and activations quantized to 5 bits with no integer bits.
  5 bits was the precision the authors settled on; they also evaluated 4 to
  8 bits, and `QBITS_P` selects among them;
* the 16-bit, 6-fractional-bit layer result type. The paper states this
  default as "16 total bits with 6 fractional bits", and that reading is
  followed here. The HLS tool's own notation would instead give 6 integer
  bits.

Choices made in this design where the publication says nothing:

* **Input count.** The network has one input. The publication does not give
  the input width, but with one input the layer table sums to exactly the
  1608 parameters of its "mlp_1608" model.
* **Linear output layer** and the **I-then-Q output order**.
* **Angle format**: radians with 13 fractional bits.
* **Number details**: signed weights with 4 fractional bits; truncate-and-wrap
  for the result type; round-half-up with saturation in the ReLU.
* **Result-type defaults.** The authors tuned each layer's result precision
  but did not list the values. The per-layer result types therefore all
  default to 16 bits with 6 fractional bits.
* **Run-time parameter loading.** The original flow compiles the weights
  into the logic.
* **Stage structure**: the valid/ready handshakes, the pipelining and the
  REUSE scheme.

Outside the design, and therefore brought out as ports:

* the controller that supplies α;
* the B-spline pulse synthesizer and DAC chain that turn θ into I(t) and Q(t);
* the qudit itself.

The mixture-of-experts and multi-region networks of the publication were
software comparisons and are not implemented.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and exits. With
Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/qctl_pkg.sv tb/tb_snap_mlp_top.sv --top-module tb_snap_mlp_top -o sim
obj_dir/sim
```

The same command works for the other testbenches. `tb_dense_layer` also
needs `tb/dense_layer_harness.sv` on the command line or `-ytb`.

* `tb_snap_mlp_top` runs the full-size network at default parameters. It
  loads 1608 random parameters, streams 100 angles at full rate with exact
  latency checks, then 150 angles with random gaps and back-pressure. It
  reloads a second parameter set and streams 150 more. Every output vector
  is compared bit-exactly with an integer reference network inside the
  testbench. The test fails unless each of these events happens at least
  once: load, reload, pipeline overlap, full-rate output, stall, ReLU zero
  clamp, ReLU saturation, and outputs that change with the angle.
* `tb_snap_mlp_reuse` runs the same test with REUSE = 4.
* `tb_snap_mlp_workloads` builds the network at each precision the authors
  synthesized: 4, 5, 6, 7 and 8 bits. It drives a linearly spaced angle sweep
  through each, 10,000 angles at 5 bits and 2,000 at the others, and checks
  every output bit-exactly. A sixth instance gives every layer its own narrow
  result type so that the wrap-around is exercised. This test takes about a
  minute to compile. `tb/snap_mlp_sweep_harness.sv` holds its per-instance
  driver and reference.
* The per-module tests cover the following:
  * `dense_layer`: three shapes with random streams and back-pressure,
    including the wrap case;
  * `relu_quant`: every 16-bit input;
  * `param_store`: in-range and out-of-range writes;
  * `mlp_layer`: loading over the bus, values and latency.

The random weights in the tests are not trained values. The tests show that
the arithmetic and control match the specification above, not that the
network reproduces the published infidelities.
