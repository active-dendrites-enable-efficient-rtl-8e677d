# TTFS spiking network with active dendrites: RTL

A network that learns tasks one after another tends to overwrite what it learned
for earlier tasks. This design runs inference for a time-to-first-spike (TTFS)
spiking network that resists this forgetting by giving every hidden neuron one
*dendritic segment per task*. The segment chosen by the current task adds a
learned delay to the neuron's spike time. A neuron delayed past the end of the
observation window never fires. That is the same as an output of zero, so each
task switches on its own sub-network of hidden neurons, and no separate
winner-take-all stage is needed.

The hardware is event driven. Only neurons that spike produce work: each spike
costs one memory read and one cycle in the next layer. The default
configuration is the 784-400-400-2 network used for Split MNIST: 28×28 input
pixels, two hidden layers of 400 neurons with dendrites, and two output neurons
(the two digits of a task). It has five tasks, 4-bit signed weights, 8-bit
unsigned delays and 11-bit signed membrane potentials.

Training (weights and segments) is done offline. This RTL covers inference and
the loading of a task.

## The neuron

Time advances in discrete timesteps `t = 0 … T_max-1`. Each neuron fires at
most once. Input pixel `i`, with intensity `P` in 0…255, fires at
`t = T_max·(256 − P)/256`, so bright pixels fire early. With `T_max = 450`, a
black pixel falls outside the window and never fires.

After input `i` fires at `t_i`, the membrane of neuron `j` grows by `W_ij` in
every later timestep. The membrane is therefore a ramp whose slope is the sum
of the weights of all inputs that have fired so far. The NPU (neuron processing
unit, `rtl/npu.sv`) keeps two registers:

| register  | operation         | when |
|-----------|-------------------|------|
| synaptic  | `syn += W`        | ACCUMULATE, once for each input spike in this timestep |
| membrane  | `vm += syn`       | UPDATE STATE, once at the end of each timestep |

Then comes EVALUATE. At the first timestep `t_c` with `vm ≥ V_th`, the neuron
*crosses*. A down counter was loaded at the start of the sample with the
delay `d` of the current task's segment (LOAD DELAY). From `t_c` on, the counter
counts down once per timestep, and the neuron fires when it reaches zero.
The neuron therefore fires at

    t_fire = t_c + d        (only if t_fire < T_max; otherwise it is silent)

Exact timing, which the reference model in `tb/ttfs_ref_pkg.sv` also follows:

- The membrane after timestep `t` equals `Σ W_i·(t − t_i + 1)` over the inputs
  with `t_i ≤ t`.
- Crossing and firing are evaluated in the same timestep. With `d = 0`, a
  neuron fires in the timestep it crosses.
- Once crossed, the neuron fires `d` timesteps later even if its membrane falls
  back below `V_th` in between.
- Both registers saturate at the 11-bit limits (−1024 … 1023) and do not wrap
  around.
- `V_th` is one value per layer, set on a port.

The delay is a whole number of timesteps, 0…255. It is the value of the
sigmoid `S/(1+e^u)` for the task's segment `u`, worked out and quantised
offline. A negative segment gives a long delay and a positive one a short
delay. The chip never evaluates the sigmoid.

## A layer and one timestep

`rtl/ttfs_layer.sv` is one fully connected layer of `I` inputs and `J` neurons:

```
 adr_in ─► INPUT FIFO ─► PROCESSING CTRL ─► MEMORY CTRL ─► SYNAPSE MEMORY (I words × J·4 bit)
                                   │ ACCUMULATE              DENDRITE MEMORY (tasks × J·8 bit)
                                   ▼                            │ W rows / DELAY rows
 req_in/ack_out ◄─► MAIN CTRL ──► NEURAL CLUSTER: NPU(0) … NPU(J−1)
 req_out/ack_in ◄─►    │  ▲ spike vector
                       ▼  │
 adr_out ◄──────── OUTPUT FIFO
```

Synapse memory word `k` holds the weights from input `k` to all `J` neurons,
neuron `j` in bits `[4j+3:4j]`. One read per input spike therefore updates
every neuron in parallel. Dendrite memory word `n` holds the delays of all `J`
neurons for task `n`, so loading a task takes a single read.

**Starting a sample.** Pulse `load_task` with `task_id` while the layer is idle.
The main controller reads dendrite word `task_id`, clears every neuron, and
loads every down counter. This takes three cycles. The timestep index is set
back to 0.

**One timestep.** The main controller (`rtl/main_ctrl.sv`) runs these phases:

1. **Accumulate.** The upstream side has pushed the addresses of this
   timestep's input spikes into the input FIFO and then raised `req_in`. The
   processing controller pops one address per cycle and reads that synapse
   word. One cycle later it raises ACCUMULATE, so every NPU adds its weight.
   When the FIFO is empty and the last word has been added, `ack_out` rises
   exactly `n + 3` cycles after `req_in`, for `n` spikes. The upstream layer may
   then drop `req_in` and go on with its next timestep while this layer
   finishes.
2. **Update, evaluate.** One cycle each.
3. **Collect.** A priority encoder turns the neurons that fired into
   addresses, lowest first, one per cycle, and writes them to the output FIFO.
4. **Send.** The output FIFO is copied into the next layer's input FIFO over
   `adr_out`/`adr_out_valid`/`adr_out_ready`.
5. **Handshake.** `req_out` rises, then waits for `ack_in`. `req_out` falls,
   then waits for `ack_in` to fall. The timestep index then advances.

`ack_out` falls one cycle after `req_in` falls. A new request is accepted only
after that. A timestep with no input spikes still needs its request, because
the membranes keep ramping. With `m` output spikes and a downstream layer that
acknowledges at once, a timestep occupies the layer for about `n + 2m + 11`
cycles. Because of the early acknowledge, consecutive layers overlap: layer
L1 works on timestep `t` while L0 already takes in timestep `t+1`.

The FIFO depths are `I` (input) and `J` (output). The spikes of a whole
timestep therefore always fit. The valid/ready pairs exist for safety, and
assertions in `sync_fifo` check that no FIFO overflows. `main_ctrl` also
asserts the 4-phase rules:

- `req_in` never falls before `ack_out`;
- `ack_in` never rises without `req_out`;
- `load_task` only arrives when the controller is idle.

## The network and how to drive it

`rtl/ttfs_network.sv` chains three layers:

- L0: 784 → 400, with dendrites;
- L1: 400 → 400, with dendrites;
- L2: 400 → 2, no dendrites (`USE_DENDRITES = 0`; its delays are zero).

The spikes that a layer emits in timestep `t` are the inputs of the next layer
in timestep `t`.

The host does the following:

1. **Configure** while the network is idle, one value per cycle:
   `cfg_we`, `cfg_layer` (0…2), `cfg_sel_dend`, `cfg_row`, `cfg_col`,
   `cfg_data`.
   - Weights: `cfg_sel_dend = 0`, row = input index, column = neuron, data =
     4-bit two's complement in `cfg_data[3:0]`.
   - Delays: `cfg_sel_dend = 1`, row = task, column = neuron, data = delay.
   - Set `vth[0..2]`.
2. **Load a task**: pulse `load_task` with `task_id`, then wait for `idle`.
3. **Stream the sample.** For `t = 0 … T_max−1`: push the pixel addresses
   that fire at `t` on `in_adr`/`in_valid` (respecting `in_ready`). Then raise
   `in_req`, wait for `in_ack`, drop `in_req`, and wait for `in_ack` to fall.
4. **Receive.** For each timestep, L2 offers the addresses of output neurons
   that fired (`out_adr`/`out_valid`, accepted on `out_ready`), with
   `out_time = t`. It then raises `out_req`, which the host acknowledges on
   `out_ack` in the same 4-phase way. The output neuron that fires first gives
   the class.

All flops use asynchronous active-low reset (`rst_n`). The memories are not
reset.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N_IN`, `N_H1`, `N_H2`, `N_OUT` | 784, 400, 400, 2 | layer sizes |
| `N_TASKS` | 5 | dendritic segments per neuron (Split MNIST has 5 tasks) |
| `QS` | 4 | weight bits, signed |
| `QD` | 8 | delay bits, unsigned, in timesteps |
| `QV` | 11 | membrane and synaptic register bits, signed |
| `ttfs_pkg::TS_W` | 16 | timestep index bits |

At the defaults the memories hold 1,897,600 weight bits and 32,000 delay bits.
The configuration port carries 8 data bits. `QS` and `QD` above 8 would need a
wider port.

## What follows the published architecture and what is this design's own

These parts follow the published architecture:

- the layer organisation: input and output queues, processing, memory and
  main controllers, synapse memory, dendrite memory, and a neural cluster of
  parallel NPUs;
- the memory word layouts (`J × Q_s` and `J × Q_d`);
- the NPU structure (synaptic register, membrane register, threshold compare,
  down counter loaded with the delay, SPIKED when it reaches zero) and its
  control names;
- the 4-phase request/acknowledge between layers;
- LOAD_TASK/TASK_ID;
- the 784-400-400-2 size and the word widths.

These are this design's own choices:

- the cycle-level sequencing inside a timestep, and the acknowledge right
  after accumulation;
- the valid/ready address transfer between the FIFOs;
- the lowest-address-first priority encoder;
- `load_task` also clearing the neurons, which starts a new sample;
- the saturating arithmetic and the 11-bit synaptic register;
- one threshold per layer;
- the delay counted in whole timesteps;
- one-cycle synchronous memory reads;
- an element-wide configuration port instead of the two AXI buses of the FPGA
  prototype. No AXI bridge or host processor is included.

Leaving the dendrite memory out of the output layer follows the network
description, where only hidden neurons have dendrites. The block diagram
draws a dendrite memory in every layer. On the block diagram, the labels on the
right side of a layer repeat the left side's names. The arrows here follow the
described protocol: the request goes downstream and the acknowledge comes back.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `tb/ttfs_ref_pkg.sv` is a behavioural model of
a layer. It works timestep by timestep, straight from the neuron equations,
with no queues, memories or handshakes, and it is the reference for the NPU,
cluster, layer and network tests.

| testbench | what it checks |
|---|---|
| `tb_npu` | spike time against the model over 40 random neurons; at most one spike; clear; saturation |
| `tb_neural_cluster` | per-lane weights and delays, spike vector each timestep |
| `tb_sync_fifo` | against a queue model, including full/empty and simultaneous push/pop |
| `tb_synapse_memory`, `tb_dendrite_memory` | element writes, word reads, read latency |
| `tb_memory_ctrl` | read routing, valid latency, write decode |
| `tb_processing_ctrl` | read order, one ACCUMULATE per address, done exactly `n + 2` cycles after start |
| `tb_main_ctrl` | load sequence, phase order, address order, both handshakes, timestep count |
| `tb_ttfs_layer` | spike times of every neuron over 6 samples and 3 tasks with back-pressure; `req_in`→`ack_out` = `n + 3` cycles |
| `tb_ttfs_network` | 16-12-10-2 network, 6 samples on 5 tasks, 60 timesteps |
| `tb_ttfs_network_full` | the default 784-400-400-2 network, 4 samples, 450 timesteps |

The two network tests compare the output spike times and the set of hidden
neurons that fired with the model. They also count how often each mechanism
occurred and fail if one never did:

- a spike delayed by a dendrite;
- a neuron pushed past the window by its delay (gated);
- a timestep with no input spikes;
- output back-pressure;
- a task switch that changes which hidden neurons fire;
- membrane saturation.

Weights, delays and images are random (synthetic images, not MNIST), so the
tests show that the hardware matches the neuron model, not the accuracy of a
trained network.

Running a testbench with Verilator 5, from the directory above `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/ttfs_pkg.sv tb/ttfs_ref_pkg.sv tb/tb_ttfs_network.sv \
    --top-module tb_ttfs_network -o sim
./obj_dir/sim
```

For the other testbenches, replace the last file and the top module name; the
two package files can stay on the command line for all of them. The full-size
test builds and runs in well under a minute.

## Throughput

In the full-size test, a sample of about 150 input spikes, in which most of the
800 hidden neurons fire, takes about 7,200 clock cycles from `load_task` to
the end of timestep 449. The host there answers every handshake at once. Most
of the time goes into the fixed cost of about 16 cycles per timestep,
including timesteps with no spikes. The published FPGA prototype reports
37.3 ms per image, with the host driving the network from software. No clock
frequency is given for it, so the two figures cannot be compared.

## Limits

- No on-chip learning: the weights and delays come from offline training
  followed by quantisation.
- The host interface is a plain port. A bus bridge (AXI or otherwise) and the
  software that encodes images and reads results are not part of this RTL.
- At the defaults, the weight memories need about 1.9 Mbit. On a small FPGA
  this is a large share of the block RAM.
- The design has not been synthesised for timing. The 400-wide priority
  encoder and the 1600-bit memory words are the likely critical paths on an
  FPGA.
