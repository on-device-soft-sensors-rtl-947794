# A fixed-point MLP accelerator for an on-device flow soft sensor

A *soft sensor* estimates a quantity that is hard to measure directly from
quantities that are easy to measure. Here the hard quantity is the flow rate of
a fluid in an open Venturi channel. The easy ones are three level readings, from
one ultrasonic and two radar level sensors, sampled at 10 kHz. A small
multilayer perceptron (MLP) maps each sample of the three levels to one flow
value. The mapping runs on the sensor node itself, not in the cloud, so only the
estimate goes over the radio, and every sample must be processed within its
100 µs sample period.

The node pairs a microcontroller with a small FPGA. The microcontroller reads
the sensors and owns the radio. The FPGA holds the network as a dedicated
accelerator. For each sample the microcontroller writes the three readings into
the accelerator and starts it. The accelerator computes the estimate and raises
an interrupt. The microcontroller then reads the estimate back.

This repository is the RTL of the accelerator side, in synthesizable
SystemVerilog: the network engine and the register interface the
microcontroller drives. The microcontroller, sensors, radio and FPGA
configuration flash are outside it.

## The network

```
 x[0] ─┐        ┌─ h[0]   ─┐
 x[1] ─┼─ W1,b1 ┼─ ...     ├─ W2,b2 ── y[0]   (flow estimate)
 x[2] ─┘  ReLU  └─ h[H-1] ─┘  linear
```

* 3 inputs, one per level sensor (`N_SENSORS`).
* One hidden layer of H neurons (`N_HIDDEN`). The evaluated sizes are 10, 30,
  60 and 120. The default build uses 120, the largest, and a smaller model runs
  on it unchanged (see *Sizes* below).
* One output neuron (`K_OUT`). The parameter allows K > 1 outputs. These share
  the hidden layer, so they are not K fully independent networks.
* Every weight, bias, input, activation and output is an 8-bit signed
  fixed-point number with 4 fraction bits (Q4.4): range −8.0 … +7.9375, step
  1/16. This is the number format the model was quantised to during training.

A neuron computes

```
acc    = Σ_i x[i]·w[i]                 exact; Q8.8 products in a 24-bit accumulator
v      = floor((acc + 16·b) / 16)      bias aligned to Q8.8, then back to Q4.4
v      = clamp(v, −128, 127)           saturate to 8 bits
out    = max(v, 0)  (hidden)   |   v  (output)
```

The hidden layer uses ReLU and the output is linear. The sources of this design
do not state the activation, the rounding or the overflow behaviour, so these
are choices made here. ReLU is the usual choice for such an MLP, and a
regression output should not be clipped at zero. Floor rounding (an arithmetic
shift) and saturation are the cheapest well-behaved options. All of it is in
`requant()` and `activate()` in `rtl/softsensor_pkg.sv`, so a different
convention is a change in one place.

## How the engine schedules the work

Each layer has one multiply-accumulate unit, and the two layers run one after
the other, so the accelerator does one multiply-accumulate per cycle. It has no
parallel array of multipliers. At 3-120-1 that is still more than fast enough.

`linear_layer` is one fully connected layer with a single `fxp_mac`. After
`start` it walks its neurons in order:

| cycles per neuron | what happens |
|---|---|
| IN | read input i and weight W[o][i], accumulate (the first one restarts the sum) |
| 1  | read bias b[o], requantise, activate, write output o |

A one-cycle `done` pulse follows the last neuron. A pass therefore takes
`OUT·(IN+1) + 1` cycles. Inputs are read through an address/data pair with a
combinational reply, so the layer can read either a register array or a
register file.

`mlp_engine` chains two layers. On `start` it copies the input vector into its
own registers and starts the hidden layer (3 → H, ReLU). The hidden layer writes
into `act_buffer`, an H-entry register file. The hidden layer's `done` starts
the output layer (H → K, linear). The output layer reads `act_buffer` and
writes the result registers `y`. The engine's `done` is the output layer's
`done`. The `y` registers hold the result until the next inference.

Engine latency, from the clock edge that takes `start` to the edge that ends
the `done` cycle:

```
H·(N+1) + 1  +  K·(H+1) + 1    =  5H + 3 for N = 3, K = 1   (603 at H = 120)
```

The register interface adds one cycle for its start register, so `irq` rises
`5H + 4` cycles after the edge that takes the CTRL write.

| H | cycles to irq | at 100 MHz | reported FPGA inference time |
|---|---|---|---|
| 10  | 54  | 0.54 µs | 1.04 µs |
| 30  | 154 | 1.54 µs | 3.04 µs |
| 60  | 304 | 3.04 µs | 6.04 µs |
| 120 | 604 | 6.04 µs | 12.04 µs |

The reported times were estimated from simulation of the original accelerator,
whose clock frequency is not stated. They grow by exactly 0.1 µs per hidden
neuron plus 0.04 µs. That fits 10H + 4 cycles at 100 MHz, or 5H + 2 cycles at
50 MHz. This design's count, 5H + 4, is of the same form. At any clock of
50 MHz or more it is within 0.04 µs of the reported times or faster, and it
fits the 100 µs sample period for any clock above about 6 MHz.

### Weights and biases

Each layer holds its weights and biases in two `param_rom` instances. The
parameters are part of the FPGA configuration, not loaded at run time. To
switch models you reconfigure the FPGA with a different build. Each ROM is
filled either from a hex file or, when none is given, from a deterministic
placeholder function. The hex file has one two-digit Q4.4 word per line, and
its path is relative to the simulator's or synthesis tool's working directory.
The placeholder is a 32-bit integer hash of (seed, index) giving values in
−8 … 7, i.e. −0.5 … +0.4375. Its formula is in `softsensor_pkg`. The
placeholder lets the hardware be built and tested without a trained model, but
it computes nothing meaningful about flow.

| top parameter | contents | word order | placeholder seed |
|---|---|---|---|
| `W1_FILE` | hidden weights, N·H words | neuron o, input i at `o·N + i` | 1 |
| `B1_FILE` | hidden biases, H words | neuron o at `o` | 2 |
| `W2_FILE` | output weights, H·K words | output k, hidden o at `k·H + o` | 3 |
| `B2_FILE` | output biases, K words | output k at `k` | 4 |

The ROMs read asynchronously, like distributed (LUT) ROM. At 601 bytes for the
default model this is cheap. If you move them to block RAM you must add one
pipeline stage in `linear_layer`.

## The register interface

`host_if` is a synchronous 8-bit register bus in the accelerator's clock
domain: `bus_addr`, `bus_wdata`, `bus_we`, `bus_re`, `bus_rdata`, and an
interrupt line `irq`. A write takes effect at the rising edge where `bus_we` is
high. A read returns its data on `bus_rdata` after the rising edge where
`bus_re` is high. The bus, the map and the flags are this design's own. All
that is fixed from outside is the division of work: the microcontroller loads
the inputs and triggers, and the accelerator signals when it has finished.

| address | name | access | meaning |
|---|---|---|---|
| 0x00 + i | X[i] | R/W | sensor input i, Q4.4 |
| 0x10 | CTRL | W | bit 0 = 1: start an inference |
| 0x11 | STATUS | R, W1C | bit 0 busy, bit 1 done, bit 2 start rejected |
| 0x20 + k | Y[k] | R | output k, Q4.4 |
| 0x30 / 0x31 / 0x32 | CFG | R | H, N, K of this build |

* An accepted start pulses the engine's `start` one cycle after the CTRL write
  and clears `done`.
* A start written while the engine is busy is ignored and sets STATUS bit 2.
* The engine's `done` sets STATUS bit 1, which drives `irq`. Writing 1 to bit 1
  clears it, and so does the next start.

If the microcontroller side is asynchronous, or a serial link, put a
synchroniser or a bridge in front of this bus. The physical link between the
two chips is a bundle of parallel lines whose use is not documented.

A typical sequence per sample:

```
write X[0], X[1], X[2]
write CTRL = 1
wait for irq            (604 cycles at the defaults)
read  Y[0]
write STATUS = 0x02     (or just start the next sample)
```

## Files

| file | contents |
|---|---|
| `rtl/softsensor_pkg.sv` | number format, default sizes, register map, `requant()`, `activate()`, placeholder weights |
| `rtl/fxp_mac.sv` | multiply-accumulate with bias, requantisation and activation |
| `rtl/param_rom.sv` | weight/bias ROM (hex file or placeholder) |
| `rtl/act_buffer.sv` | hidden-activation register file |
| `rtl/linear_layer.sv` | one fully connected layer, one neuron at a time |
| `rtl/mlp_engine.sv` | hidden layer → buffer → output layer |
| `rtl/host_if.sv` | microcontroller register interface and interrupt |
| `rtl/soft_sensor_top.sv` | top: `host_if` + `mlp_engine` |

The top's only ports are the clock, an active-low synchronous reset, the
register bus and `irq`. At the defaults it synthesises to 152 flip-flops and
5,760 memory bits. These are the 600 bytes of weight and bias ROM and the
120-byte activation buffer. The single output bias folds into logic.

## Simulating

Each module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`. All compare against `tb/tb_ref_pkg.sv`, an
integer reference of the neuron and network that is written separately from
the RTL and also recomputes the placeholder weights.

| testbench | what it covers |
|---|---|
| `tb_fxp_mac` | random product sequences, bias, saturation, ReLU |
| `tb_param_rom` | placeholder contents, hex-file loading (`tb/rom_test.mem`), out-of-range reads |
| `tb_act_buffer` | write/read ordering against a shadow array |
| `tb_linear_layer` | a 3→7 ReLU and a 9→2 linear layer: values, one write per neuron, latency `OUT·(IN+1)+1` |
| `tb_mlp_engine` | 3-10-1 and 3-6-2 networks: results, latency, start ignored while busy |
| `tb_host_if` | the register map, start pulse, rejection, done/irq and clearing, against a stand-in engine |
| `tb_soft_sensor_top` | the default 3-120-1 build end to end over the bus (see below) |
| `tb_workloads` | the four evaluated sizes 3-10/30/60/120-1 end to end, latency against the reported times |

`tb_soft_sensor_top` runs at the default parameters. Over 40 inferences it
checks every result and the 604-cycle CTRL-to-irq time. It also counts how
often each mechanism occurs and fails if one never does: hidden ReLU clamping,
saturation, a rejected start, `done` cleared by write-1, and `done` cleared by
a new start.

With plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_soft_sensor_top \
    -y rtl -y tb +libext+.sv rtl/softsensor_pkg.sv tb/tb_ref_pkg.sv \
    tb/tb_soft_sensor_top.sv -o sim
obj_dir/sim
```

Replace the testbench name to run another. Every testbench finishes in well
under a second.

## Sizes

The default build, H = 120, holds every evaluated model. A 3-H-1 model with
H ≤ 120 needs 5H + 1 bytes of parameters. A smaller model runs on the
120-neuron build with zeros in the unused neurons' weights and biases, because
ReLU(0) = 0 adds nothing to the output. It then takes the 120-neuron time. A
build with `N_HIDDEN_P` set to the model's size takes 5H + 4 cycles. The
accumulator is exact up to a fan-in of 256, so `N_HIDDEN_P` may go up to 256
without changing `ACC_W`.

## How far this follows the original design

Taken from the original: the system split (the microcontroller loads inputs
and triggers, the FPGA computes and signals completion), the network shape
(3 inputs, one hidden layer of 10/30/60/120 neurons, one output), and the
8-bit fixed-point format with 4 fraction bits. One description of that format
reads "(6,8)" next to "8 total bits, 4 fractional". This design follows the
explicit 8/4.

This design's own choices:

* the one-MAC-per-layer schedule and its latency
* ReLU and linear activations
* floor rounding and saturation
* the 24-bit accumulator
* asynchronous ROMs and register-file buffer
* the register bus, its map and the interrupt behaviour
* the placeholder weights

The original accelerator was generated by a model-to-VHDL toolchain whose
internals are not described. This is an independent implementation of the same
function, not a copy of that toolchain's output. The trained weights are not
available, so the accuracy figures reported for the quantised model (test MSE
62–74 depending on H) cannot be reproduced with this RTL as shipped. Power and
energy are not modelled.
