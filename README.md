# HYDRA: a layer-multiplexed fully connected DNN accelerator in SystemVerilog

A fully parallel DNN accelerator builds every layer of the network in hardware.
HYDRA builds only **one** layer: a one-dimensional array of 64 fused
multiply-accumulate (FMA) units. The network's layers are run on it one after
another. A control unit changes the layer size, the weights and the activation
between runs, and the outputs of one layer become the inputs of the next.

The design also shares the activation function. In a neuron the FMA works for
every input (196 cycles for a 196-input neuron), but the activation function
runs only once. So the layer has no activation per neuron. The 64 FMA results
go into a parallel-in serial-out (PISO) register. That register passes them,
one per cycle, through a **single** activation unit. This saves 63
activation units and costs 64 cycles per layer.

This RTL is written from the published description of HYDRA. That description
covers the FMA and the block diagram in some detail and the rest only briefly.
Everything in the design follows one of three rules:

- It follows the description.
- It is the simplest logic that does what the description says a block does.
- It is a choice marked as this design's own.

The sections below say which is which.

## Default configuration

| Item | Value |
|---|---|
| Network | 196:64:32:32:10 (four fully connected layers; 196 = a 14x14 MNIST image) |
| FMA units | 64 |
| Data word | 8-bit signed, 3 integer bits (sign included), 5 fraction bits, written `<8,5>` / Q3.5 |
| Accumulator | 25 bits = 2n + k + 1, with n = 8 and k = ceil(log2 196) = 8 |
| Activation units | 1, ReLU or linear, chosen per layer |
| Weights | one bank per FMA, 324 words each (196+64+32+32), plus one bias per layer |

Parameters of `hydra_top` (defaults in brackets): `DW` [8], `IBITS` [3],
`MAX_FMA` [64], `MAX_IN` [196], `MAX_LAYERS` [4] and `WDEPTH` [324].

## Block structure

```
            host load port                       cfg port   ann_init
                 |                                  |          |
   +-------------+--------------+            +------v----------v-----+
   | weight_buffer (64 banks)   |            |     control_unit      |--> ann_done, busy, cfg_err
   |  kernel[j], bias[j]        |<--w_base---|  layer list, AF modes |
   +-------------+--------------+            +--+-------------+------+
                 |                     compute_init|   xfer    |compute_done
   +-------------v--------------+   x     +--------v--------+  |
   | input_buffer (196 words)   |-------->|   layer_fsm     |--+
   +-------------^--------------+ bcast   +--------+--------+
                 | xfer (1 cycle)  |               | strobes
   +-------------+--------------+  v      +--------v--------+     +------+     +-----+
   | output_buffer (64 words)   |<--------| fma_array 64 x  |====>| PISO |---->| AF  |--+
   |  ANN_out by address        |   AF    |   fma_unit      |     +------+     +-----+  |
   +----------------------------+  serial +-----------------+                           |
                 ^---------------------------------------------------------------------+
```

| Module | Role |
|---|---|
| `hydra_pkg` | Shared enums (`af_mode_e`, `fsm_state_e`, `ctrl_state_e`, `ld_sel_e`, `cfg_sel_e`) and default sizes |
| `fma_unit` | One neuron: weight register, bias register, multiplier, accumulator, resize with rounding |
| `fma_array` | The reused layer: 64 `fma_unit`s with one broadcast input and an enable per FMA |
| `piso` | Captures the 64 FMA results in parallel and shifts them out one per cycle |
| `act_fn` | The single activation unit (registered), ReLU or linear |
| `weight_buffer` | 64 weight banks plus biases; all banks read at one shared address |
| `input_buffer` | The current layer's input vector; host-written for layer 1, copied from the output buffer afterwards |
| `output_buffer` | Collects the activation unit's serial output; feeds the next layer and `ann_out` |
| `layer_fsm` | Sequences one layer: idle, initial, pre_FMA, FMA, PISO, AF |
| `control_unit` | Runs the whole network: layer configuration, layer order, copies between layers, ANN done |
| `hydra_top` | Wires the above together |

## The FMA and its number format

Inputs, weights, biases and outputs are Q3.5 words. Their product has 10
fraction bits. The bias is shifted left by 5 to the same scale. It is then
**preloaded** into the accumulator, so no separate cycle is needed to add it.
Each FMA works in three steps:

1. `load_bias`: the bias register takes the bias.
2. `preload`: the accumulator takes bias << 5. The weight register takes the
   first weight.
3. `acc_en` for n_in cycles: `acc += x * weight_reg`, and the weight register
   takes the next weight. The weight register is one stage ahead of the
   feature input, so a weight is read one cycle before it is used.

The 25-bit accumulator cannot overflow, even with 196 full-scale products.
The accumulator is converted back to `<8,5>` in two steps:

- **Rounding (RNA).** Round to nearest, with ties away from zero. This is done
  on the magnitude: add 16 and drop the low 5 bits.
- **Saturation.** A result outside the 8-bit range clamps to 127 or -128, and
  the FMA raises `sat`.

Both steps are combinational from the accumulator. The description names
"resize" and "RNA" but does not say what happens on overflow. Saturation is
this design's choice. `fma_unit` works at any `DW`. The test covers 5, 8, 16
and 32 bits, the four widths for which the FMA was reported.

## One layer, cycle by cycle

This is the part of the design that most needs explaining. One layer
has `n_in` inputs and `n_out` neurons. The input vector is in the input buffer,
and weight bank j holds neuron j's weights from address `w_base`. In a fully
connected layer every neuron needs every input, so input word i goes to all
64 FMAs at the same time. Each FMA reads its own weight i from its own bank.
FMAs numbered `n_out` and above have their enable low and do nothing.
(The description mentions power gating of unused FMAs. Here it is an enable
only.)

`layer_fsm` has the six states of the original state diagram. Cycle numbers
below count the first FMA cycle as cycle 1.

| State | Cycles | What happens |
|---|---|---|
| idle | until `compute_init` | nothing |
| initial | 1 | `load_bias`; Index = n_in (the number of accumulations) |
| pre_FMA | 1 | `preload`: accumulators take the bias, weight registers take weight 0 |
| FMA | n_in (cycles 1..n_in) | `acc_en`; input index i = 0..n_in-1, weight index i+1; Index counts down to 0 |
| PISO | 1 + n_out + 1 | cycle n_in+1: `piso_load` (count = n_out); then one shift per cycle until count = 0 |
| AF | 1 | the last word is stored; `compute_done`; back to idle |

The activation unit registers each word it receives from the PISO. The result
for neuron k is therefore registered at the end of cycle **n_in + 2 + k**. For
the first layer, neuron 0 is ready in cycle 198: 196 accumulation cycles, one
cycle to load the PISO and one cycle in the activation unit. This matches the
reported figure of two extra cycles and a first output in cycle 198. The output
buffer stores word k one cycle later, at address k. In the state diagram the
step from pre_FMA to FMA and the step from AF to idle have no condition. Here
each is taken after one cycle. A reset (`rst = 1`) returns the state machine to
idle from any state.

A layer takes `n_in + n_out + 5` cycles from `compute_init` to
`compute_done`. The control unit adds one start cycle, and one cycle to copy
the outputs between layers.

## Running a network

`control_unit` stores the network as a list of sizes, exactly as written in
`196:64:32:32:10`. Entry l is layer l's input count and entry l+1 is its
neuron count. The unit also stores an activation mode per layer. After reset
the list is 196:64:32:32:10, with ReLU for the three hidden layers and linear
for the output layer. On `ann_init`, the unit repeats these steps for each
layer l:

1. It presents the layer's size, its activation mode, the FMA enable mask
   (j < n_out) and the weight base `w_base`. The base is the sum of the
   earlier layers' input counts. It then pulses `compute_init`.
2. It waits for `compute_done`.
3. If more layers remain, it copies the output buffer into the input buffer
   in one cycle (`xfer`) and goes back to step 1.

After the last layer `ann_done` rises. It stays high until the next `ann_init`.
The ten class scores are then read as `ann_out` by setting `out_addr` to
0..9.

**Weight layout.** Bank j, address `base(l) + i`, holds the weight from input i
to neuron j of layer l. Neurons j >= n_out(l) leave those words unused. The
biases are in a separate array: bank j, entry l.

**Run-time reconfiguration.** While the unit is idle, `cfg_we` writes one
configuration register:

| `cfg_sel` | Register written |
|---|---|
| `CFG_NUM_LAYERS` | number of layers |
| `CFG_SIZE` | size-list entry `cfg_idx` |
| `CFG_AF` | activation of layer `cfg_idx` (`cfg_data[0]`: 0 = ReLU, 1 = linear) |

Some networks cannot be held:

- no layers, or more than `MAX_LAYERS`;
- a zero size;
- more than 64 neurons in a layer;
- more than 196 inputs to the first layer;
- more weights than a bank holds.

For these `cfg_err` is raised and `ann_init` is ignored. A hidden layer's
input count always equals the previous layer's neuron count, which is at
most 64. So it always fits the words that the copy moves.

**Cycle count.** The run takes `sum(n_in + n_out + 6) + (L - 1)` clock edges
from the edge that samples `ann_init` to `ann_done`. For 196:64:32:32:10 that
is 266 + 102 + 70 + 48 + 3 = **489 cycles**, or 4.89 us at the reported
100 MHz.

## Host interface

| Port | Direction | Meaning |
|---|---|---|
| `clk`, `rst` | in | clock; synchronous active-high reset |
| `ann_init` | in | start a run |
| `ld_we`, `ld_sel`, `ld_bank`, `ld_addr`, `ld_data` | in | one word per cycle: `LD_WEIGHT` (bank, address), `LD_BIAS` (bank, layer), `LD_INPUT` (input word address) |
| `cfg_we`, `cfg_sel`, `cfg_idx`, `cfg_data` | in | layer configuration |
| `out_addr` / `ann_out` | in / out | read the output buffer (class scores after `ann_done`) |
| `ann_done`, `busy`, `cfg_err` | out | status |
| `af_valid`, `af_out` | out | the activation unit's serial output, every layer |
| `sat_flag` | out | an active FMA saturated since `ann_init` |
| `layer_state` | out | state of `layer_fsm`, for observation |

Loads and configuration writes are legal only while `busy` is low. Assertions
in `hydra_top` flag a violation in simulation. Reset clears the output buffer,
but not the weight or input buffers. So all weights, biases and inputs a network
uses must be loaded before `ann_init`. Loading the full network takes 64 x (324 + 4) + 196 = 21,188 cycles.

## Where this design departs from the description, or fills gaps

- **Layers run one after another.** The text describes each layer's outputs as
  being "stored" and then processed by the next layer. It gives 66 cycles for
  the 64-input second layer. The RTL follows this. The reported formula for
  layer-reuse latency, T_R = sum n(l) + 2L - 3, gives 341 cycles for
  196:64:32:32:10. That figure counts each layer's serial outputs only once,
  which implies the next layer accumulates while the previous layer's PISO
  is still emptying. This RTL does not overlap layers. It takes 489 cycles.
- **Softmax is not built.** A softmax at the output layer is mentioned, but not
  described. The output layer is linear, and its ten Q3.5 scores are read from
  `ann_out`. The predicted class is the largest of them.
- **The activation functions are this design's choice.** The description calls
  the single activation unit "reconfigurable" but does not list its functions.
  The unit offers ReLU and linear.
- **Inputs are broadcast.** The block diagram draws separate input lines
  input0..input# to the FMAs. For a fully connected layer they all carry the
  same word, so one word is broadcast.
- **The buffers use no block RAM.** The buffers are register/array storage with
  combinational read, which matches the reported use of no block RAM. The
  memory map, the host load port, the configuration registers, `cfg_err` and
  the saturation flag are all this design's own.
- **Word format of ANN_out.** The block diagram labels the output `<3:-5>`,
  which would be a 9-bit word with 4 integer bits. The FMA output is labelled
  `<8,5>`, and the stated format is 3 integer bits including the sign. The RTL
  uses 8-bit Q3.5 everywhere, including `ann_out`.
- **Weights come from a host port.** In the block diagram the weights reach the
  weight buffer from the control unit, and where they originate is not said.
  Here the host writes the banks directly, one word per cycle. The same applies
  to the first layer's inputs.
- **Unused FMAs are idled by an enable.** The description mentions power gating
  of idle FMAs. Here an enable freezes them, and no power switch is modelled.
- **Wide FMAs are tested with narrower operands.** The FMA was reported at 5,
  8, 16 and 32 bits, and `DW` covers all four. The 32-bit FMA is simulated
  only with operands of up to 24 bits, so the reference sum stays exact in
  64-bit arithmetic. The rest of the accelerator is simulated only at 8 bits.

## Simulating

Every testbench in `tb/` checks itself. It prints
`TB_RESULT checks=N failures=M` and stops with `$finish`. Each also has a
watchdog. Build and run one with Verilator 5, from the folder that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb rtl/hydra_pkg.sv tb/tb_hydra_top.sv \
          --top-module tb_hydra_top -Mdir obj_top
./obj_top/Vtb_hydra_top
```

| Testbench | What it checks |
|---|---|
| `tb_fma_unit` (with helper `fma_unit_checker`) | random dot products of up to 196 terms at 5, 8, 16 and 32 bits; ties in both directions; saturation; enable; reset |
| `tb_fma_array` | 64 FMAs with a broadcast input, random layer sizes; idle FMAs hold their value; `sat_any` |
| `tb_piso` | load, FMA0-first order, count down to 0, load priority |
| `tb_act_fn` | ReLU and linear, one-cycle latency |
| `tb_weight_buffer` | every word of 64 x 324 weights and all biases |
| `tb_input_buffer`, `tb_output_buffer` | host writes, one-cycle copy, addressed read, reset |
| `tb_layer_fsm` | state order, strobes, indices, PISO load in cycle n_in+1, `compute_done` after n_in+n_out+5, reset from FMA and from PISO |
| `tb_control_unit` | layer order, sizes, weight bases, masks, cycle count, reconfiguration, `cfg_err` |
| `tb_hydra_top` | the whole accelerator at default parameters (see below) |
| `tb_mnist_workload` | the 196:64:32:32:10 workload as a classifier: weights loaded once, 20 sparse 196-pixel images classified back to back; all ten scores, the argmax class and 489 cycles per image |

`tb_hydra_top` runs the whole design against a fixed-point reference model in
the testbench. It performs five runs:

1. the 196:64:32:32:10 network with random weights;
2. the same network with weights large enough to saturate;
3. a run-time switch to 150:48:24:6 with other activation modes;
4. an invalid configuration, which must be refused;
5. the default network again after reset.

Every serial activation word of every layer and all ten `ann_out` scores are
compared with the model. Two timings are also checked: the first activation
in FMA cycle 198, and the 489-cycle total. The testbench counts how often
each mechanism occurred and fails if one never did. Those mechanisms are layer
reuse, output-to-input copies, idle FMAs, ReLU clamping, linear layers,
saturation, reconfiguration and refusal. The whole run takes well under a
second.

To change the network, write the configuration registers as shown in
`tb_hydra_top` (run 3). To change the hardware size, override the
`hydra_top` parameters. `WDEPTH` must be at least the sum of the input counts
of the layers you intend to run.
