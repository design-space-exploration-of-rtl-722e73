# A sparsity-aware, layer-pipelined SNN accelerator in SystemVerilog

Spiking neural networks pass binary spikes between layers, and in a trained
network most neurons are silent in most time steps, increasingly so in deeper
layers. This accelerator turns that into a hardware knob. Every layer has its own
small set of physical *neural units*, and each unit serves several *logical*
neurons one after another. The number of logical neurons per unit, the
*logical-to-hardware ratio* (LHR), is chosen per layer. A layer that sees few
input spikes can share one unit among many neurons and barely lose speed. Work
is event driven: a layer does work only for the pre-synaptic neurons that
actually spiked, so its time per step grows with the spike count, not the layer
size.

The RTL follows the architecture of *Design Space Exploration of Sparsity-Aware
Application-Specific Spiking Neural Network Accelerators* (Aliyev, Svoboda,
Adegbija). That paper explores the design space with a cycle-accurate SystemC
model. This is an independent RTL rendering of the hardware it describes. It
is built in the paper's headline MNIST configuration:

* network 784-500-500-300: 784 input pixels, two hidden layers of 500 neurons,
  and 10 classes with 30 output neurons each (population coding);
* ratios (4, 8, 8): 125, 63 and 38 neural units;
* 15 time steps per sample.

All of these are parameters.

## Structure

```
snn_top
 ├─ fc_layer u_l1  (784 -> 500, LHR 4)
 │   ├─ ecu                event control unit: the layer's controller
 │   │   ├─ penc           64-bit priority encoder
 │   │   └─ addr_shift_reg list of spike addresses
 │   ├─ nu_fc   x125       neural units, 4 neurons each
 │   └─ mem_unit x125      weight/bias memory blocks (one per unit by default)
 ├─ fc_layer u_l2  (500 -> 500, LHR 8: 62 units of 8 and one of 4)
 └─ fc_layer u_l3  (500 -> 300, LHR 8: 37 units of 8 and one of 4)
```

Between layers, a spike train moves as one wide word (one bit per neuron) over a
valid/ready handshake. Inside a layer, the ECU drives every neural unit over a
broadcast bus: start strobes, the current spike address and a first-step flag.
Each unit answers with a done pulse and its slice of the layer's output spikes.

## One time step in one layer

This is the core of the design. The step has four phases, and all of them run
in the layer's `ecu`.

**1. Accept.** When the previous layer offers a train (`pre_syn_avail`) and the
ECU is idle, the ECU copies the train into its own input buffer in one cycle.
The previous layer's output buffer is then free again. This copy is what makes
the layers a pipeline: with the default sizes, layer 1 works on step *t+2*,
layer 2 on *t+1* and layer 3 on *t* at the same time.

**2. Compress.** The train is turned into a list of the indices of the set bits.
A priority encoder wider than about 64 to 100 bits gets too costly, so the
buffer is read in `CHUNK`-bit pieces (64 by default, 13 chunks for 784 inputs).
In each cycle one of two things happens:

* the encoder finds the lowest set bit of the current chunk, and the global
  address `chunk*CHUNK + bit` is pushed into `addr_shift_reg`. The "bit reset"
  logic clears that bit in the chunk register for the next cycle.
* the chunk is empty, and the next chunk is loaded.

So compression costs *s + NCHUNK* cycles for *s* spikes.

**3. Accumulate (shift phase).** For each stored address, oldest first, the ECU
puts the address on `shifted_spk_addr` and pulses `accum_en`. Every neural unit
then walks through its M neurons, one memory read per cycle. The spike address
is the column of the weight matrix, so the unit reads word
`n*PRE + addr` and adds it to neuron n's accumulator. A unit pulses `done` after
M + 1 cycles. The ECU remembers which units are done, shifts the list once all
of them are, and sends the next address. A train with no spikes skips this phase
entirely.

**4. Activate.** The ECU pulses `activ_en`. Each unit again walks its neurons,
reads each neuron's bias and computes the leaky integrate-and-fire update:

```
v_new = beta * v_prev + acc + bias          (v_prev := 0 on a sample's first step)
spike = v_new > THRESH
v     = spike ? v_new - THRESH : v_new      acc := 0
```

The units' `spike_out` vectors, concatenated in neuron order, are copied into
the output buffer and `layer_avail` is raised. If the next layer has not yet
taken the previous buffer, the ECU holds *before* activation. Activation
overwrites `spike_out`, so this hold is the design's only stall. Each ECU counts
`TIME_STEPS` trains per sample and raises `first_step` on the first one, so a
new sample starts from zero potentials.

**Latency.** For a layer with ratio M (LHR), `NCHUNK` chunks and *s* input
spikes, where each unit owns its memory block, the time from the accepting
clock edge to `layer_avail` is

```
NCHUNK + M + 5 + s * (M + 5)   cycles
```

`tb_fc_layer` checks this formula. The per-spike cost M + 5 is the
M memory reads, one cycle of read latency, the done pulse, and the ECU's shift
and strobe cycles. The pipeline runs at the pace of its slowest layer, which is
why the ratio pays off most in layers with few spikes.

## Numbers and memories

* Weights, biases, accumulators and potentials are 32-bit signed Q16.16
  (`snn_pkg::word_t`). The 32-bit width matches the accelerator's weight read
  bus. The Q16.16 split is a choice of this RTL. Nothing saturates, so a
  trained model has to stay within ±32768.
* `beta` is an unsigned 16-bit fraction. The product `beta*v` is truncated back
  to Q16.16 with an arithmetic shift. Defaults: beta = 0.5, threshold = 1.0
  (`snn_pkg::ONE`). In a real deployment both come from training.
* Each neural unit has a region of `LHR*(PRE+1)` words in a single-port RAM
  (`mem_unit`, one-cycle read latency). The region holds the weights at
  `n*PRE + i` and the biases at `LHR*PRE + n`. In total the default build holds
  797,860 words (about 25.5 Mbit). The network needs 793,300 of them; the rest
  fill the half-used last units.
* `MEM_SHARE` sets how many units share one block. The default is 1, so every
  unit owns its block. With a larger value, fewer but deeper blocks are built.
  Each cycle, the block grants the read to the requesting unit with the lowest
  index. A unit that is not granted keeps its request and tries again in the
  next cycle. Sharing saves memory blocks but adds cycles: the units of one
  block read one at a time, so the M + 1 cycles of each phase can grow up to
  `MEM_SHARE` times.
* Weights are written through the top-level `load` bus
  (`snn_pkg::load_t`: layer, logical neuron, pre-synaptic index, data). Index
  `PRE` addresses the bias. Loading is one word per cycle and must be done
  while the network is idle. A load has priority over a unit's read.

## Top-level interface (`snn_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset of all control state |
| `in_valid`, `in_spikes`, `in_ready` | in/in/out | 1/784/1 | input spike train of one time step (rate-coded pixels) |
| `out_valid`, `out_spikes`, `out_ready` | out/out/in | 1/300/1 | output layer's spike train of one time step |
| `load` | in | `load_t` | weight and bias writes |

The class decision is left to whoever reads `out_spikes`. It sums the spikes of
each class's 30 neurons over the 15 steps and picks the class with the largest
sum. Input encoding happens outside the accelerator as well.

## Parameters

| module | parameter | default | notes |
|---|---|---|---|
| `snn_top` | `N_IN, N_H1, N_H2, N_OUT` | 784, 500, 500, 300 | layer sizes |
| `snn_top` | `LHR1, LHR2, LHR3` | 4, 8, 8 | logical neurons per neural unit |
| all | `CHUNK` | 64 | priority encoder width |
| all | `TIME_STEPS` | 15 | trains per sample |
| all | `BETA`, `THRESH` | 0.5, 1.0 | LIF constants |
| `snn_top` | `MEM_SHARE1..3` | 1, 1, 1 | neural units per memory block (`MEM_SHARE` in `fc_layer`) |

`fc_layer` can be chained to build other fully connected depths. The top has
exactly three layers.

## Measured behaviour

Every run below uses the test weight generator, and about 12 % of the inputs spike.
That is roughly the 95-of-784 average the paper reports for MNIST.

| network | ratios | cycles per 15-step sample | paper (cycles/image) |
|---|---|---|---|
| 784-500-500-300 | 4, 8, 8 | 46,612 | 53,308 |
| 784-500-500-300 | 4, 4, 4 | 32,604 | 31,583 |
| 784-1024-1024-300 | 32, 32, 8 | 260,332 | 388,897 |

The paper's numbers depend on its trained weights and its number of time steps,
and the paper does not state the number of steps for these rows. So only the
trend and the order of magnitude can be compared.

## How it departs from the paper, and what is not here

Choices this RTL makes where the paper is silent:

* the ready half of each handshake, the pulse protocol of `accum_en`,
  `activ_en` and `done`, and the `first_step` flag;
* the order of the phases: compress everything, then accumulate, then activate,
  with no overlap between them;
* reset by subtraction, and the strict `>` test against the threshold;
* Q16.16 numbers, bias storage in the weight memory, and the load bus;
* a single address list broadcast to all units (the paper's figure draws a
  separate address output per unit);
* lowest bit first in the priority encoder;
* fixed-priority arbitration when units share a memory block, and one block
  per unit by default (the paper sets neither).

Not built:

* **Convolutional layers and 2x2 OR max-pooling.** The paper uses them for its
  DVS-gesture network. The conv unit processes output channels in parallel and
  input channels serially, and adds a 3x3 filter to the up to nine neurons each
  input spike touches. The fully connected configuration here has no use for
  them.
* **Fixed-size limits.** A three-layer top cannot hold the 4- and 5-layer
  networks of the evaluation, or their 1024- and 512-wide layers, without
  changing parameters or chaining more `fc_layer`s.
* **Run-time reallocation of units.** The paper lists it as future work.

## Simulating

Each testbench in `tb/` is self-checking. It ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. The testbenches compare
against a behavioural reference (`tb/snn_tb_pkg.sv`) written independently of
the RTL. Test weights come from a hash of (layer, neuron, input), so no weight
files are needed. For example:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/snn_pkg.sv tb/snn_tb_pkg.sv \
  rtl/snn_top.sv rtl/fc_layer.sv rtl/ecu.sv rtl/penc.sv rtl/addr_shift_reg.sv \
  rtl/nu_fc.sv rtl/mem_unit.sv tb/tb_snn_top.sv --top-module tb_snn_top
./obj_dir/Vtb_snn_top
```

| testbench | what it covers |
|---|---|
| `tb_penc`, `tb_addr_shift_reg` | leaf blocks against simple models |
| `tb_mem_unit` | a block shared by three ports: grant priority, region offsets, load writes |
| `tb_nu_fc` | one neural unit: LIF results, M + 1 cycle timing, refused memory reads |
| `tb_ecu` | address order, compression time, first-step marking, output order, pipelining, stall, empty trains |
| `tb_fc_layer` | one layer against the reference, per-step latency formula |
| `tb_snn_top` | reduced network (100-30-20-12) end to end, with random back-pressure and 1, 2 and 3 units per memory block; requires every mechanism to occur, memory waits included |
| `tb_snn_top_full` | the default build, all 793,300 words loaded, one 15-step sample (about 30 s) |
| `tb_workloads` (+ `tb_net_runner`) | the 784-1024-1024-300 network and the (4,4,4) ratio set (about 3 min) |

The simulator is two-state. The design resets all control state and all
potentials, so uninitialised memory contents are never read before they are
loaded.
