# A hybrid parallel / time-multiplexed spiking-network classifier

This is synthesizable SystemVerilog for a digital inference engine for fully
connected spiking neural networks (SNNs), such as an MNIST classifier with
784 inputs, three hidden layers of 300 and 10 outputs. It follows the
"Hybrid Architecture" of *Design Space Exploration of Hardware Spiking
Neurons for Embedded Artificial Intelligence* (Abderrahmane, Lemaire,
Miramond).

The design rests on one observation. In a rate-coded SNN, most spikes come
from the input layer, so the first hidden layer does most of the work, and
the deeper layers see only a trickle of events. The engine therefore splits
the network in two:

* **Neural core.** The first hidden layer is built fully in parallel. It has
  one integrate-and-fire (IF) neuron per logical neuron, and every weight of
  that layer is held in registers. An input spike is integrated by all 300
  neurons in one clock.
* **NPUs.** Every deeper layer is one *Neural Processing Unit*: a single
  hardware IF neuron that computes the layer's neurons one after another.
  The weights of these layers live in an external SDRAM. A *network
  controller* queues the NPUs' weight requests and returns each weight to
  the NPU that asked for it.

The output layer's spikes go to a *winner-class* unit. It counts spikes per
class and stops processing as soon as one class is clearly ahead. That early
stop is where an SNN saves time and energy.

```
 image ─► spike_generator ─► neural_core ─► FIFO ─► npu ─► FIFO ─► npu ─► FIFO ─► npu ─► FIFO ─► winner_class
 (pixels)   (input coding)   (input + 1st hidden,     (hidden 2)       (hidden 3)       (output)      (TD / Max)
                ▲             300 IF neurons,            │  ▲            │  ▲            │  ▲            │
                │             weights in registers)      ▼  │ weight     ▼  │            ▼  │            │
                │                                      network_controller: request FIFO + demux        │
                │                                                 │  ▲                                  │
                │                                                 ▼  │                                  │
                │                                      external weight SDRAM (mem_* port)               │
                └──────────────────────────── stop processing ◄───────────────────────────────────────┘
```

## Neuron model

Every neuron, parallel or time-multiplexed, uses the same combinational step
(`if_core`):

```
sum  = potential + (spike ? weight : 0)      // saturating, 16-bit signed
fire = sum > threshold
potential' = fire ? sum - threshold : sum    // "subtract" reset
```

Weights are 8-bit signed and potentials 16-bit signed. The neuron fires when
the sum is strictly greater than the threshold. The paper's text and its
neuron diagram say this, though one of its equations uses "≥"; this design
uses ">". Each layer has its own threshold, given as an input of the top.
There is no leak and no refractory period.

## Time steps and why the order of spikes matters

The classification runs in discrete **time steps**. In each step the spike
generator offers every input neuron once, in pixel order, saying whether it
spikes in this step. The neural core integrates those spikes, and the events
(addresses of neurons that fired) flow through the FIFOs and NPUs at once.
Layers work concurrently.

The class decision is taken after **every** output spike. For example,
Terminate Delta stops once the leader is more than `delta` spikes ahead. So
the decision depends on the order of the output spikes, not only on their
number. The design makes that order deterministic with a single rule:

> The generator starts time step *t+1* only when the whole network has
> drained. That means the neural core is waiting for input, every event FIFO
> is empty, every NPU is idle and no weight read is outstanding.

Within a step, each layer sees its input events in a fixed order, because
FIFOs keep order and each NPU handles one event at a time. A layer's state
depends only on the order of its own input events. So the output spike
sequence is the same as evaluating the step strictly layer by layer. It does
not depend on SDRAM latency, stalls or FIFO sizes. The end-to-end tests rely
on this: a plain sequential software model of the network predicts the
class and every spike count exactly.

The cost of the rule is that layers overlap only within a step.

## Input coding (`spike_generator`)

The generator stores one 8-bit image (`pix_we/pix_addr/pix_data`). Each step
it streams one bit per pixel through a valid/ready handshake. It supports
three codes, chosen with `coding`:

| code | how a pixel of intensity `v = pix/255` becomes spikes |
|---|---|
| Jittered Periodic (rate) | Each pixel has a 16-bit phase accumulator. Each step it adds `rate = f_min + (f_max − f_min)·v`, where `f_min` and `f_max` are spikes per step as fractions of 2^16. A carry out is a spike. The random jitter comes from the start phase of each accumulator, drawn from a 16-bit LFSR at step 0. |
| Single Burst (time) | One spike at step `floor((255 − pix)·window/255)`, so bright pixels spike first. |
| First Spike (hybrid) | One spike per pixel, at the first carry of the jittered accumulator, and never before step `t_min`. A carry earlier than `t_min` is held until `t_min`. |

**Spike Select** is not a separate code. It is Jittered Periodic input with
the first hidden layer's threshold raised, so that only strong evidence gets
past the first layer. Set `threshold[0]` higher than the trained value.

The generator stops when the winner unit decides or after `max_steps` steps.

## Neural core (`neural_core`): input layer + first hidden layer

The core is built from 300 `if_neuron`s (parameter `N_HID`), each with its
own 784 weight registers (`N_IN`), plus a *hidden counter*, a *1:N counter*
with a multiplexer, and an event FIFO.

* **Silent pixel.** A pixel that does not spike takes one clock. The hidden
  counter advances.
* **Spiking pixel.** In one clock, every neuron adds its weight for that
  pixel; the hidden counter gives the weight address. Then the 1:N counter
  scans the neurons' output-spike bits through the multiplexer, one neuron
  per clock. It writes the address of each neuron that fired into the FIFO,
  so events leave in ascending neuron order. The next pixel is accepted only
  after the scan. A spiking pixel therefore costs `1 + N_HID` clocks.
* **FIFO full.** The scan waits and no event is dropped.

The first-layer weights are written through `core_w_we/core_w_neuron/
core_w_addr/core_w_data`. At the default size they are 235,200 bytes of
registers (1.88 Mbit). This is the dominant area of the design, as in the
paper's FPGA results.

## NPU (`npu`): one time-multiplexed layer

An NPU holds the potentials of its `N_NEU` logical neurons in a register
array, and has one `if_core` and an output FIFO. For each input event `e`,
popped from the layer below, its controller walks `j = 0 … N_NEU−1`:

1. It requests weight `(e, j)`, at local address `e·N_NEU + j`.
2. It waits for the weight.
3. It integrates the weight into potential `j`.
4. If neuron `j` fires, it writes `j` to the output FIFO.

Requests are issued only while the output FIFO has room, so a firing always
finds space. This is the NPU's back-pressure. After `clear` or reset, an
`N_NEU`-clock sweep zeroes the potentials.

One event costs about `N_NEU × (memory round trip + 2)` clocks. This serial
cost is the price of the NPU's small area.

## Network controller (`network_controller`) and weight memory map

All NPUs share one SDRAM read port. Requests from the NPUs are pushed into a
small queue FIFO, together with the requesting NPU's number, and served
first come, first served. Requests in the same clock are queued lowest NPU
first. One read is in flight at a time. When the data returns, the demux
raises `w_valid` only for the NPU recorded with that request.

The NPUs' weight blocks are packed one after another from address 0:

```
BASE[0] = 0
BASE[k] = BASE[k-1] + TOPOLOGY[k] · TOPOLOGY[k+1]        (block of NPU k-1)
SDRAM[BASE[k] + e·TOPOLOGY[k+2] + j] = weight from neuron e of layer k+1 to neuron j of layer k+2
```

For 784-300-300-300-10 this gives 90,000 + 90,000 + 3,000 = 183,000 bytes,
with blocks at 0, 90,000 and 180,000.

The memory port of the top follows a simple protocol:
* `mem_req` with `mem_addr` is held until `mem_ready`.
* Some clocks later, `mem_rvalid` comes with the byte on `mem_rdata`.

Any latency works. A real SDRAM controller (refresh, bursts, row
management) is not part of this design and has to be put in front of the
device.

## Winner-class selection (`winner_class`, `terminate_delta`, `max_terminate`)

`winner_class` pops one output event per clock and adds one to that class's
8-bit saturating counter. It then applies the rule chosen with `sel`:

* **Terminate Delta** (`terminate_delta`). A first maximum unit finds the
  leader and its index. A second finds the best of the other classes. The
  rule stops when `leader − second > delta`.
* **Max Terminate** (`max_terminate`). It stops when `leader > max_value`.

Both values are typically 4. At the stop, the class index is latched and
`decided` rises. Later events are discarded and the counts freeze. The
generator receives the stop and sends no further time steps. Ties go to the
lowest class index.

## Using the top module (`snn_hybrid`)

Parameters are listed below.

| parameter | default | meaning |
|---|---|---|
| `N_LAYERS` | 5 | layers including input and output (≥ 3) |
| `TOPOLOGY` | `'{784,300,300,300,10}` | neurons per layer |
| `CORE_FIFO_DEPTH`, `NPU_FIFO_DEPTH` | 512 | event FIFO depths |
| `ADDR_W` | 24 | SDRAM address width |
| `CW` | 8 | class counter width |
| `T_W` | 16 | time-step counter width |

To classify one image:

1. Write the pixels (`pix_*`) and the first-layer weights (`core_w_*`).
   Fill the SDRAM with the deeper weights using the map above.
2. Set `coding`, `f_min`, `f_max`, `t_min`, `window`, `max_steps`,
   `threshold[0..N_LAYERS-2]`, `sel`, `delta` and `max_value`. Hold them
   while the image runs.
3. Pulse `start` for one clock. This clears all potentials and counts.
4. Wait for `done`. Then `decided` says whether a stop rule fired; otherwise
   `max_steps` ran out. `class_idx` is the winner (or the current leader),
   `activations[]` the spike counts and `t_step` the last step.

Weights and the image stay loaded between images.

## Latency

A time step costs about:

```
N_IN + (input spikes) · N_HID                      neural core
+ Σ over NPU layers (events into the layer) · N_NEU · (memory round trip + 2)
```

The layers overlap within a step. Simulated at the default size with random
(untrained) test weights and SDRAM latency 3, one image took the following
with each input code:

| input code | steps | clocks | output events |
|---|---|---|---|
| Jittered Periodic, Terminate Delta | 16 | 4,329,374 | 332 |
| Spike Select (raised first threshold), Max Terminate | 10 | 962,392 | 39 |
| First Spike (lower first threshold), Max Terminate | 5 | 4,091,895 | 318 |
| Single Burst (window 12), Max Terminate | 13 | 3,687,365 | 280 |

These numbers are far above the paper's measured averages for the same
network:

| input code | paper's average (clocks) |
|---|---|
| Jittered Periodic | 84,064 |
| Spike Select | 34,437 |
| First Spike | 23,540 |
| Single Burst | 441,432 |

Two things explain the gap:
* Random weights make the deep layers fire far more than a trained network
  does. In the Jittered Periodic run above, about 1,600 events entered the
  third hidden layer's NPU, at 300 × 5 clocks each.
* This design serialises each NPU event over all its neurons, with one
  memory access each, and scans the whole first layer after every input
  spike.

The paper does not give its cycle-level schedule, so these figures are not
a like-for-like comparison. The Spike Select run shows the intended effect:
far fewer deep-layer events, far fewer clocks.

## Where this design departs from, or fills gaps in, the paper

Each item below is this design's own choice, not taken from the paper.

* **Time-step barrier.** The step barrier described above is this design's
  way to get the layer synchronisation the paper only states is needed.
* **Neural core schedule.** The core scans its output bits after each
  spiking input pixel, and holds the input meanwhile. The paper shows the
  scan counter and multiplexer, but not when they run.
* **Jitter law.** The jitter is a uniform random start phase. The paper
  refers to an external library's jittered-periodic stimulus for the exact
  law.
* **First Spike timing.** First Spike uses that same random phase instead of
  the paper's normal-then-uniform deviation. The rule that no spike is sent
  before `t_min` is kept.
* **Widths.** Potential width (16 bits), counter width (8 bits) and
  saturation are assumptions. The 8-bit weights follow the paper.
* **Storage and memory port.** The FIFO depths, the NPU potential storage,
  the NPU handshake, the memory-port protocol and the packed weight map are
  all assumptions.
* **SDRAM.** The SDRAM itself is external. The testbenches use a behavioural
  model, `tb/weight_sdram_model.sv`, with a configurable latency and random
  stalls.
* **Alternatives not built.** The paper also describes a fully parallel and
  a purely time-multiplexed architecture, as well as the ROMs of the latter.
  They are the alternatives it compares against and are not built here.
  Other topologies (784-100-10, 784-200-10, 784-300-10, 784-300-300-10) are
  obtained by changing `N_LAYERS`/`TOPOLOGY`, and all four are tested at
  full size. The default build holds only 784-300-300-300-10.

## Files

| file | contents |
|---|---|
| `rtl/snn_pkg.sv` | weight/potential types, coding and rule enums, saturating add |
| `rtl/if_core.sv`, `rtl/if_neuron.sv` | IF step; neuron with potential register |
| `rtl/counter.sv` | modulo counter with end-of-sweep flag |
| `rtl/fifo.sv` | event FIFO (first-word fall-through, overflow/underflow assertions) |
| `rtl/max_unit.sv`, `rtl/terminate_delta.sv`, `rtl/max_terminate.sv`, `rtl/winner_class.sv` | class selection |
| `rtl/spike_generator.sv` | image store and input coding |
| `rtl/neural_core.sv` | parallel first hidden layer |
| `rtl/npu.sv` | time-multiplexed layer |
| `rtl/network_controller.sv` | SDRAM request queue and demux |
| `rtl/snn_hybrid.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per block |
| `tb/tb_snn_hybrid.sv` | end-to-end, 32-16-12-10-6 network, 36 images over all codes and rules |
| `tb/tb_snn_hybrid_full.sv` | end-to-end at the default 784-300-300-300-10 size |
| `tb/tb_snn_topologies.sv`, `tb/snn_workload_run.sv` | the 784-100-10, 784-200-10, 784-300-10 and 784-300-300-10 networks at full size, side by side |
| `tb/snn_ref_model.svh` | sequential reference model used by both end-to-end tests |
| `tb/weight_sdram_model.sv` | behavioural SDRAM |

## Verification

Every testbench checks its block against values it computes itself, and
prints `TB_RESULT checks=N failures=M`. Each has a watchdog. Run one with:

```
verilator --binary --timing --assert -Irtl -Itb rtl/snn_pkg.sv tb/tb_npu.sv --top-module tb_npu
./obj_dir/Vtb_npu
```

What the end-to-end tests cover:

* **`tb_snn_hybrid`.** Small FIFOs and a stalling SDRAM make every mechanism
  happen, and the test fails if one never does:
  * the core scan stalled by a full FIFO;
  * an NPU held off by a full output FIFO;
  * simultaneous NPU requests;
  * SDRAM stalls;
  * stops by both rules;
  * the step limit;
  * all three input codes, and Spike Select.

  After every image, the decision, the class and all spike counts must equal
  the reference model.
* **`tb_snn_hybrid_full`.** It runs one image with each of the four input
  codes at the full default size, in about 90 seconds of simulation. Each
  run is also checked against the model.
* **`tb_snn_topologies`.** It builds the four smaller networks of the
  resource comparison as separate instances of the design, at their real
  sizes. Each classifies one image with Max Terminate, checked against the
  model. This also covers three-layer networks, where the output layer is
  the only NPU.

Unit tests check cycle counts where the design defines them:
* neural core step length `N_IN + spikes·N_HID + 1`;
* NPU per-event time `1 + N_NEU·(latency + 2)`;
* generator step timing.

Known lint warnings:
* A few intentionally unused outputs: the max values inside
  `winner_class`, the neuron potentials inside `neural_core`, and the
  generator's `busy` in the top.
* Verilator notes that the reset also feeds the assertions'
  `disable iff`. This is harmless.
