# A hardware neural controller for a cartpole, in SystemVerilog

Nonlinear model predictive control (NMPC) steers a robot well, but it solves an
optimisation problem at every control step and is far too slow for a small
embedded board. The approach described here replaces the optimiser with a
small multilayer perceptron that was trained offline to imitate it: the
network maps the measured state and the goal straight to the next control
action. Evaluated in programmable logic, such a *neural controller* (NC)
answers in a few microseconds, which allows control rates of 1 kHz and more on
a low-cost SoC FPGA.

This RTL implements the programmable-logic side of the physical cartpole
controller built that way, together with the neural-controller datapath in the
two published configurations:

| | cartpole NC | F1TENTH race-car NC |
|---|---|---|
| network | 7 - 32 - 32 - 1 | 64 - 64 - 64 - 2 |
| inputs | sin θ, cos θ, θ̇, x, ẋ, x target, θ target (up/down) | 20 relative waypoints × 3 values, vx, ωz, steering angle, slip angle |
| outputs | normalized motor command | desired speed, desired steering angle |
| input / weight / activation format | Q12.2 / Q14.4 / Q12.1 | Q16.4 / Q16.4 / Q16.4 |
| intermediate result | 18 bits (Q18.6 here) | 16 bits (Q16.6 here) |
| hidden activation | tanh | tanh |
| latency, this RTL | 77 cycles = 3.08 µs at 25 MHz | 54 cycles = 2.16 µs |
| latency, published | 91 cycles = 3.64 µs | 93 cycles = 3.72 µs |

QM.N means M bits in total, N of them integer bits including the sign. So
Q12.2 has 10 fraction bits.

The cartpole system in `cartpole_nc_top` is the default configuration. The
F1TENTH network is the same `mlp_nc` module with the `F1_*` parameter set from
`nc_pkg`. In the car, the controller board only runs the network. Its inputs
arrive from the car's main computer, so no car-specific logic exists.

## System around the logic

```
 potentiometer -> RC filter -> SoC ADC --> adc_ctrl --> median_filter --> angle_raw ----+
 motor encoder ------------------------->  quad_encoder --------------> cart_count ----+--> processor
                                                                                       |    (software:
                     nc_x, nc_in_valid  <-----------------------------------------------+     sin/cos,
                           |                                                                 velocities,
                        mlp_nc (7-32-32-1) -- nc_u, nc_out_valid --> pwm_gen --> H-bridge    targets)
```

The processor reads the filtered pole angle and the cart position. It derives
the angle's sine and cosine and the two velocities (averaged over a few
milliseconds to suppress quantization noise). It adds the target position and
the wanted equilibrium, and starts an inference. The NC's output goes straight
to the PWM generator. Weights are loaded by the processor through the
`nc_wr_*` port before control starts.

Outside this RTL, and so only ports here, are:
- the processor and its program;
- the processor-to-logic bus;
- the SoC's analog-to-digital converter (a vendor hard macro);
- the H-bridge and the analog RC filter.

The testbenches use a behavioural converter model, `tb/xadc_model.sv`.

Everything runs on one 25 MHz clock. All control flip-flops use an
asynchronous active-low reset `rst_n`. The large data arrays (weights,
accumulators) are not reset.

## The neural-controller datapath

### Schedule

`mlp_nc` chains three `dense_layer` instances: two hidden layers with tanh and
a linear output layer. They run one after another.

Inside a layer, every output neuron has its own multiply-accumulate unit, and
all of them run in parallel. Each cycle, `PAR` inputs are broadcast to every
neuron. Each neuron multiplies them by its own weights and adds the products
to its accumulator. A layer evaluation takes:

- one cycle to load each accumulator with its bias;
- ⌈fan-in / PAR⌉ multiply-accumulate cycles;
- one cycle to requantize, apply the activation and register the outputs.

The layer's `done` pulse starts the next layer. From the clock edge that
accepts the input vector to the edge that raises `out_valid`, the latency is

    sum over layers of (ceil(fan_in / PAR) + 2)

For the cartpole with `PAR = 1` that is 9 + 34 + 34 = 77 cycles. For F1TENTH
with `PAR = 4` it is 18 × 3 = 54 cycles.

`PAR` trades multipliers for latency. It is the knob the published design
describes as trading DSP use against latency, though the published pipeline
itself is not reproduced. With `PAR = 2` the F1TENTH network would need 102
cycles, more than the published 93, so its parameter set uses 4.

### Number formats (the part most worth reading twice)

Each product of an input (IN_F fraction bits) and a weight (WT_F fraction
bits) has IN_F + WT_F fraction bits. The accumulator keeps full precision: it
is IN_W + WT_W + ⌈log2(fan-in+1)⌉ + 1 bits wide, so it cannot overflow. The
bias has the weight format and is shifted left by IN_F to line up with the
products.

After the last product, the sum is cut to the *intermediate result* format in
two steps:

1. The surplus fraction bits are dropped, rounding toward −∞ (an arithmetic
   shift).
2. The value is saturated to RES_W bits.

Hidden layers then apply tanh and produce the activation format. The output
layer is linear, and its outputs are the intermediate results themselves.

For the cartpole:
- Layer 1: the product has 10 + 10 = 20 fraction bits. Eight are dropped to
  reach Q18.6.
- Layers 2 and 3: the products have 11 + 10 = 21 fraction bits, so nine are
  dropped.
- The motor command `nc_u` is Q18.6. ±1.0 (±4096) is full motor power.

The published design fixes only the *width* of the intermediate result. Its
integer width (6 bits here), the rounding and the overflow rule are choices of
this RTL. A trained network must be quantized with the same rules for this
RTL to reproduce it bit for bit.

### tanh

`tanh_act` is a 1024-entry table over [−4, 4), one entry per 1/128.

Entry *i* holds tanh(−4 + i/128), rounded to the output format and
saturated. Inputs outside the range clamp to the end entries. The index is
the pre-activation shifted right by (fraction bits − 7) and offset by 512.

The table is computed at elaboration time by a constant function. No data file
is involved. Its worst-case error against the true tanh is below 0.01, which
the testbench checks. Each neuron of a hidden layer has its own copy of the
table. Synthesis turns these copies into ROMs: 64 × 12 kbit for the cartpole
network.

### Weights

Weights live in a register file in each layer, written one at a time:

- `wr_layer` selects the layer: `LAYER_H1`, `LAYER_H2` or `LAYER_OUT`;
- `wr_row` selects the neuron;
- `wr_col` selects the input;
- `wr_col` equal to the fan-in writes the bias.

Writing during an inference is a protocol error, and an assertion flags it.

This departs from the published implementation. There, the trained weights
are compiled into the logic as constants, so a pruned (zero) weight costs
nothing. That made the 80%-sparse F1TENTH network fit the FPGA. Here every
weight, zero or not, takes a register and a multiplier input. The gain is that
one netlist can run any trained network.

### Handshake

Drive `x_in` and raise `in_valid`. The inputs are captured on the edge where
`in_valid && in_ready`, and may change afterwards. `in_ready` stays low until
`out_valid` pulses. `u` keeps its value until the next inference completes.

## Sensor and actuator blocks

### median_filter

The pole-angle potentiometer is sampled at about 350 kHz, and a rolling median
over the last 64 samples removes spikes.

The filter keeps the 64 samples as a sorted list. Every entry carries its age,
so exactly one entry is the oldest. For each new sample, the list is updated
in one cycle:

1. The oldest entry is removed, and the entries above it shift down.
2. Every remaining entry is compared with the new sample.
3. The new sample is inserted where the comparisons change from "≤" to ">".
   The entries above it shift up.

The median is element 32 of the new list, the upper of the two middle
elements. After reset the list holds 64 zeros. The output is registered, one
cycle after the sample. The logic cost is 63 comparators and a 64-way
shift/insert network.

### adc_ctrl

A 71-cycle divider (352 kHz at 25 MHz) triggers a conversion (`convst`). The
controller waits for `eoc`, then reads the result register through the
converter's register port (`den`/`daddr`, answered by `drdy`/`do`). It keeps
bits 15:4, the 12-bit code. A tick that comes while the previous conversion is
still running is dropped and counted in `missed`. The handshake follows the
Xilinx XADC. The channel address `0x1E` is a placeholder.

### quad_encoder

This block synchronizes the two encoder channels and decodes every edge (4×
decoding) into a signed 16-bit count. A step with both channels changing at
once is ignored and flagged on `err`.

The cart encoder gives 1200 counts per gearbox revolution, or 118.8 counts per
cm. The 44 cm track therefore spans about 5,200 counts. Whether those 1200
counts already include the 4× factor is not known. The direction convention
is arbitrary.

### pwm_gen

`pwm_gen` produces 10 kHz PWM (2500 clock cycles per period) in sign-magnitude
form for a TB6612FNG-type H-bridge:

- `in1` high means positive, `in2` high means negative, and both low means
  stop;
- `pwm` is high for ⌊min(|u|, 1) × 2500⌋ cycles.

A new command takes effect at the next period boundary, so pulses are never
cut short. `enable` low puts the driver in standby.

## Where this RTL departs from, or adds to, the published design

- **Weights:** the weight store is writable, instead of weights compiled into
  logic. Sparsity is not exploited.
- **Schedule:** the layers run one at a time, with `PAR` inputs per cycle.
  Latencies are 77 and 54 cycles, against the published 91 and 93.
- **Number formats:** the integer width of the intermediate results (6 bits),
  floor rounding with saturation, the bias format (same as the weights), and
  the linear output layer are this RTL's choices.
- **tanh:** the 1024-entry, ±4 table is this RTL's.
- **F1TENTH size:** the published table gives 16,778 parameters for
  64-64-64-2. The stated structure (64 inputs, two hidden layers of 64 units,
  2 outputs) has 12,610, and this RTL follows the structure.
- **Peripherals:** only the names and rates of the ADC sequencer, encoder and
  PWM blocks are published. Their internals here are the simplest that do the
  job. The median filter's structure is this RTL's.
- **Command path:** the NC output drives the PWM directly. There is no
  processor bus and no control-rate timer: the processor triggers each
  inference.
- **Outside this RTL:** velocity averaging and the computation of sine and
  cosine belong to the processor's software, and are not implemented.

## Simulating

Each testbench checks its results itself and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/nc_pkg.sv tb/tb_cartpole_nc_top.sv --top-module tb_cartpole_nc_top
./obj_dir/Vtb_cartpole_nc_top
```

| testbench | what it checks |
|---|---|
| `tb_tanh_act` | table values, and error against the true tanh |
| `tb_dense_layer` | tanh and linear layers with PAR not dividing the fan-in, against an integer model; cycle count; weight rewrite |
| `tb_mlp_nc` | cartpole network, random weights and inputs, bit-exact against a reference model (`tb/mlp_nc_check.sv`), 77-cycle latency |
| `tb_mlp_nc_f1tenth` | the same for the F1TENTH network, 54-cycle latency |
| `tb_median_filter` | every output against a sort of the last 64 samples; spikes, ties, ramps |
| `tb_adc_ctrl` | 71-cycle sample spacing, data path, dropped ticks with a slow converter |
| `tb_quad_encoder` | random walks both ways, latency, illegal steps, wrap-around |
| `tb_pwm_gen` | 2500-cycle period, duty, direction, saturation, standby |
| `tb_cartpole_nc_top` | the whole cartpole logic at full size (see below) |

`tb_cartpole_nc_top` runs every block at its published size. Acting as the
processor, it:

1. loads random weights;
2. feeds an angle level with single-sample spikes through the converter model;
3. moves the cart forward, then back;
4. runs 16 control steps at the published 1 kHz rate (one every 25,000
   cycles), alternating the target equilibrium between up and down.

Each step checks the filtered angle, the cart count, the command against a
reference model, the 77-cycle latency, and the PWM duty and direction that
follow. Late in the run, large output biases force the command into
saturation in both directions.

The tests use random weights, not the trained ones, which are not published
here. They show that the arithmetic is exact to the stated number formats, not
that a particular trained controller balances the pole. Anyone using a trained
network must quantize it with the rounding and saturation rules above.
