# A clock-driven spiking neural network accelerator

This is synthesizable SystemVerilog for a small, configurable accelerator that
runs inference of fully connected spiking neural networks (SNNs). The main
configuration classifies 28×28 images. It has 784 inputs, 128 hidden and 10
output neurons, all first-order leaky integrate-and-fire (LIF), and runs 100
time steps per image. A second configuration, for spoken digits, has a
recurrent hidden layer (700-200-20) of second-order LIF neurons.

The design rests on one idea: **every neuron of a layer is updated at the same
time, while the layer's inputs are presented one after another.** In each time
step a layer walks through its input spikes. For each input it reads one row
of the weight memory, which holds that input's weight to every neuron, and
hands the row to all neurons in the same clock cycle. So a step costs about
one cycle per layer input, whatever the number of neurons. A step in which no
input spikes skips the walk. All layers work in parallel, so the layer with
the most inputs sets the pace.

Each neuron is tiny: one adder/subtractor per state variable, a register and a
comparator. The decays are bit shifts, not multiplications. Blocks talk
through a single two-wire `start`/`ready` handshake. A controller that must
wait for several blocks ANDs their `ready` signals.

## Structure

```
spiker_network                      top
├── network_cu                      time-step sequencer
├── spiker_layer  (one per layer)
│   ├── layer_cu                    walks through the layer inputs
│   ├── synapse_rom                 feed-forward weights, one row per input
│   ├── synapse_rom                 feedback weights (recurrent layer only)
│   └── neuron  ×N                  neuron_cu + neuron_dp
└── output_interface                one spike counter per output neuron
spiker_pkg                          shared enums, control word, helpers
```

The input interface is outside the top. It could be a sensor stream, a link,
or a buffer in memory, plus whatever turns raw data into spikes. The top
exposes its handshake instead (`in_start`, `in_ready`, `in_spikes`).

## One inference, step by step

1. `start` on the top. The network controller pulses `clear` for one cycle,
   which zeroes every membrane, current, spike and counter. Then it enters
   its loop.
2. In each iteration it waits until all of these are ready:
   - the input interface (`in_ready`: the next spike vector is on `in_spikes`);
   - every layer controller;
   - the output counters.

   Then it gives all of them one common start pulse and increments its step
   counter.
3. On that start, each layer controller latches its input vector. Layer 0
   latches `in_spikes`. Layer k latches layer k-1's output spikes, which are
   the ones that layer produced in the *previous* step. The output counters
   add the last layer's spikes of the previous step.
4. After `N_CYCLES` starts, and once every layer and the output counters are
   ready again, the controller raises `ready`. `out_count[k]` is then the
   number of steps in which output neuron k fired. The predicted class is the
   neuron with the highest count.

Because of step 3, a spike takes one step per layer to cross the network. The
last layer's spikes from the final step are not counted. The layers never wait
for each other within a step, and that is what makes them run concurrently.

## The layer controller

The layer controller (`layer_cu`) runs one time step of its layer in three
phases:

| phase | when | neurons receive |
|-------|------|-----------------|
| leak  | always, once | `OP_LEAK` |
| input walk | only if the OR of the latched inputs is 1 | `OP_INTEG` once per input, with that input's weight row and its spike bit |
| fire  | always, once | `OP_FIRE` |

In the input walk, a counter CNT runs from 0 to the number of inputs. CNT
addresses the weight memory and selects the spike bit (`single_spike`). Every
neuron ANDs that bit with its own weight, so inputs that did not spike add
zero. The walk does not test spikes one by one: it visits every input of an
active step. That keeps the step time fixed and easy to predict.

The weight memory answers one clock after the address, so the walk is a
two-stage pipeline. In each cycle the controller:

- issues the read for input CNT;
- starts the neurons with the row of input CNT-1.

The walk stalls whenever the neurons' combined `ready` (an AND over the layer)
is low.

The weight memory has its own start/ready pair:

- `rd_en` starts a read, and is issued only while `syn_ready` is high.
- After a read, the row counts as delivered once `syn_ready` is high again.

The block RAMs of `spiker_layer` hold `syn_ready` high, so a row is ready one
clock after its read. A memory that takes longer per row, such as weights
fetched from outside the chip, pulls `syn_ready` low until the row is on its
output. The layer then stalls for exactly that long.

A **recurrent layer** has a second group of inputs: its own output spikes of
the previous step. Their weights live in a second memory, which may use a
different width. The controller walks this group after the feed-forward
inputs, and skips it on its own OR when no neuron of the layer fired in the
previous step.

Cycle cost of a step:

| step kind | cycles |
|-----------|--------|
| feed-forward group active | about N_FF + 4 |
| feedback group active | adds about N_NEU + 1 |
| spike-free step | 3; 4 for second-order LIF, whose leak takes two cycles |

## The neuron

A neuron is a control unit (`neuron_cu`) and a datapath (`neuron_dp`).

### Datapath

The datapath has one adder/subtractor for the membrane Vm. A multiplexer in
front of it selects one of these operands:

| input | operand | used for |
|-------|---------|----------|
| I | weight AND input spike | integration |
| L | Vm >>> BETA_SHIFT | leak, so Vm − (Vm >>> b) = (1 − 2^-b)·Vm, i.e. β = 1 − 2^-b |
| R | Vth | subtractive reset |
| S | Isyn | second-order LIF: current into the membrane |

The comparator gives `fire = Vm > Vth` (signed). For the fixed reset, a second
multiplexer after the adder loads Vreset instead of the sum. The second-order
LIF adds a synaptic current register Isyn with its own adder. That adder takes
either the gated weight or Isyn >>> ALPHA_SHIFT.

All values are two's complement. Weights of `WBW` bits are sign-extended to
the neuron width `BW`. **Every addition and subtraction saturates** at the
limits of `BW` bits. With 6-bit membranes saturation happens constantly, so
this choice matters; it is the same rule a quantiser uses for out-of-range
values.

### What each operation does

| model | OP_LEAK | OP_INTEG (per input) | OP_FIRE |
|-------|---------|----------------------|---------|
| IF | nothing | Vm += W·s | spike = Vm > Vth; on spike reset |
| I-order LIF | Vm −= Vm>>>b | Vm += W·s | same |
| II-order LIF | cycle 1: Vm −= Vm>>>b; cycle 2: Vm += Isyn and Isyn −= Isyn>>>a | Isyn += W·s | same |

The reset on a spike is either Vm −= Vth (subtractive) or Vm = Vreset (fixed).

In the II-order leak, the second cycle updates both registers on one clock
edge. The membrane therefore receives the current of the previous step:
V[n] = β·V[n−1] + I[n−1], with I[n] = α·I[n−1] + Σ W·s. `ready` is low only
during that second cycle. `spike` is a register that holds the result of the
last `OP_FIRE`.

All six combinations are available through the `MODEL` and `RESET`
parameters: three neuron models, each with subtractive or fixed reset.

## Weight memories and loading

`synapse_rom` is a `DEPTH × N_COL` array of `WBW`-bit weights. It has a
synchronous read of a whole row with one cycle of latency, and its output
holds while `rd_en` is low. That is how a block RAM behaves, and it is what
lets all neurons get their weights in the same cycle.

The memories are written one weight per cycle through the top's `wr_*` port:

| signal | meaning |
|--------|---------|
| `wr_layer` | layer to write |
| `wr_fb` | 0: feed-forward memory, 1: feedback memory |
| `wr_row` | source index (input or neuron) |
| `wr_col` | target neuron |
| `wr_data` | the weight |

Instead, each memory can be preloaded from a hex file. Give the file name
in `INIT_FILE` of `synapse_rom`, or in `INIT_FF`/`INIT_FB` of `spiker_layer`.
The file has one line per row. Each line is the row's weights as one
hexadecimal word, with column 0 in the least significant bits. For example,
a row of four 4-bit weights 7, 10, 13, 0 is written `0da7`. The top leaves
these names empty, so at the top the write port is the way in.

## Parameters of `spiker_network`

| parameter | default | meaning |
|-----------|---------|---------|
| `N_CYCLES` | 100 | time steps per inference |
| `N_LAYERS` | 2 | number of layers |
| `SIZES` | `'{784,128,10}` | inputs, then neurons of each layer |
| `RECURRENT` | `'{0,0}` | per layer: all-to-all feedback from its own previous spikes |
| `MODEL` | `NEURON_LIF1` | `NEURON_IF`, `NEURON_LIF1`, `NEURON_LIF2` |
| `RESET` | `RESET_SUBTRACTIVE` | or `RESET_FIXED` |
| `BW` | 6 | membrane / current width |
| `WBW_FF`, `WBW_FB` | 4, 4 | feed-forward / feedback weight width |
| `VTH`, `VRESET` | `'{8,8}`, `'{0,0}` | per layer, `BW`-bit signed |
| `ALPHA_SHIFT`, `BETA_SHIFT` | 3, 3 | α = 1 − 2^-ALPHA_SHIFT, β = 1 − 2^-BETA_SHIFT |

The spoken-digit set-up uses these settings:

```
.SIZES('{700,200,20}), .RECURRENT('{1,0}), .MODEL(NEURON_LIF2),
.BW(8), .WBW_FF(6), .WBW_FB(5)
```

Thresholds and shifts come from training, and none are fixed here. The
defaults are placeholders to replace with trained values. With Verilator,
pass array parameters as `localparam` constants rather than as `'{...}`
literals when you also change `N_LAYERS`.

## Latency

At 100 MHz:

- **Every step active:** an inference takes about N_CYCLES × (largest layer
  input count + 5) cycles. The image configuration measures **78,803 cycles
  (0.79 ms)**.
- **Spike-free steps:** these take only a few cycles, so a sparse input
  finishes much earlier.
- **Recurrent hidden layer:** in the spoken-digit configuration, the
  feedback walk adds up to 200 cycles to each step. One simulated inference,
  with 57 of the 100 input steps active, took 59,703 cycles (0.60 ms).

## Where this RTL departs from, or adds to, the architecture it implements

The following are choices of this design. The architecture does not specify
them.

- **Neuron operation code.** The start to the neurons carries an operation
  code (leak, integrate, fire), and the leak and fire are explicit phases
  around the input walk.
- **Two-cycle II-order leak.**
- **Saturating arithmetic** in the neuron datapath.
- **Weight loading.** The architecture fills the weight ROMs from an
  initialisation file at configuration time. Here the file is optional, and
  a write port lets a host load weights at run time.
- **Pipelined layers.** Layers exchange spikes with a one-step delay, and the
  output counters count the last layer's spikes of the previous step. The
  counters saturate.
- **Clear pulse** at the start of every inference.
- **No input wait after the last step.** The network controller does not wait
  for the input interface once the last step has been started.
- **Per-layer thresholds and reset values**, with common decay shifts, model
  and widths.
- **Feedback inputs.** Each group of inputs (feed-forward, feedback) is
  skipped on its own when empty.

The following are not built:

- The input interface and spike encoders. They depend on the application.
- Weight storage in external DRAM. The layer controller waits on the memory's
  `syn_ready`, but no controller for such a memory exists.
- The software flow that trains, quantises and generates configurations.

## Verification

Every block has a self-checking testbench in `tb/`. Each one:

- prints `TB_RESULT checks=N failures=M`;
- has a watchdog;
- uses only `$urandom` for stimulus;
- counts the mechanisms it is meant to exercise, and fails if one never
  happened.

| testbench | what it checks |
|-----------|----------------|
| `tb_neuron_dp` | random control words against an integer datapath model; both saturation limits, FIRE, fixed reset |
| `tb_neuron_cu` | control word, ready and spike in every cycle, all six variants |
| `tb_neuron` | random operation sequences on all six variants against the neuron equations |
| `tb_synapse_rom` | row reads, one-cycle latency, hold while idle, writes, preload from a hex file |
| `tb_layer_cu` | order of operations, row/spike alignment, both skips, neuron stalls, a slow weight memory |
| `tb_spiker_layer` | a recurrent II-order and a feed-forward I-order layer against the reference model over 300 steps |
| `tb_network_cu` | common start, wait for all ready, step count, clear, end of inference |
| `tb_output_interface` | counting, clear, saturation |
| `tb_spiker_network` | three reduced networks end to end (24-10-4 LIF1; 16-8-3 recurrent LIF2 with fixed reset; 12-6-5-3 IF); see below |
| `tb_spiker_network_full` | the top with all defaults (784-128-10, 100 steps); output counts and latency |
| `tb_spiker_network_shd` | 700-200-20 recurrent II-order LIF at full size |

`tb_spiker_network` compares every output count with the reference model and
checks the latency. It also requires each of these to have happened:

- skipped empty steps;
- feedback walks, both run and skipped;
- saturation;
- spikes and non-zero counts;
- stalls of the input interface.

The reference model is `snn_ref_pkg`, an integer model of the equations
written independently of the RTL structure. `net_driver` holds the shared
stimulus and checking for the network testbenches. It also contains the
behavioural input interface, which presents one vector per step and can
delay the next one by a random number of cycles.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/spiker_pkg.sv tb/snn_ref_pkg.sv rtl/*.sv tb/net_driver.sv \
  tb/tb_spiker_network_full.sv --top-module tb_spiker_network_full -Mdir obj -o sim
./obj/sim
```

List `rtl/spiker_pkg.sv` first. The block testbenches need only the files they
instantiate. The full-size run takes about a second.
