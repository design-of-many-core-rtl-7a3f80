# Many-core big/little uBrain on a segmented bus

This design spreads a spiking convolutional network over several small
neuromorphic cores of different capacity. Little cores hold small pieces of
the network and big cores hold large ones, so fewer synapses sit unused than
on an array of identical cores sized for the worst case. The cores exchange
spikes as address events over parallel *segmented* bus lanes. Switches cut
each lane into segments, and a bus controller sets them once, before the
application starts. As a result, no routing decision is made while spikes
flow. Transfers that use different segments, or different lanes, run at the
same time, and segments that no transfer needs carry nothing.

The RTL is synchronous SystemVerilog. The core it models was built as a
clock-less circuit with one circuit per neuron. Here, each layer shares one
neuron update unit in time, one synapse per clock cycle. Everything else
follows the structure of the original:

- three fully programmable layers of integrate-and-fire neurons per core;
- 2-bit weights;
- four core sizes;
- eight cores, a sensor and an actuator on two lanes of five switches each.

## 1. The core (`mubrain_core`)

A core has three layers, named from output to input:

| layer | neurons | fed by |
|-------|---------|--------|
| l2 (input) | N_L2 | the AER input, one address per neuron, one weight each |
| l1 (hidden) | N_L1 | every l2 neuron (N_L2 x N_L1 weights) |
| l0 (output) | 16 | every l1 neuron (N_L1 x 16 weights) |

The platform uses four configurations (N_L2 x N_L1 x 16). All four are
parameter sets of the same module:

| name | l2 | l1 | l0 | neurons | synapses |
|------|----|----|----|---------|----------|
| little-1 (the original core) | 256 | 64 | 16 | 336 | 17,664 |
| little-2 | 1024 | 256 | 16 | 1,296 | 267,264 |
| big-1 | 4096 | 1024 | 16 | 5,136 | 4,214,784 |
| big-2 | 16384 | 4096 | 16 | 20,496 | 67,190,784 |

The synapse count is N_L2 + N_L2·N_L1 + 16·N_L1. It includes the input weights.

### Neuron rule (`if_neuron`)

Each neuron stores a membrane value Vmem (8-bit signed) and one bit that says
whether it is integrating or silent. When a spike arrives through a weight w,
the unit computes Vmem + w at full precision and then does one of two things:

- **Sum above Vth:** the neuron fires. It passes through the fire/leak state,
  emits a spike, sets Vmem to Vrest and goes back to silence.
- **Otherwise:** it stores the sum and stays integrating. The stored value
  saturates at -128.

Vth and Vrest are programmable per layer. Their reset values are Vth = +127
and Vrest = 0. With Vth = +127, a neuron fires exactly when its 8-bit
accumulator would overflow, which is how the original neuron is described.

Leak beyond the reset to Vrest is not modelled, because no leak rate is
specified.

### Layer engine (`mubrain_layer`, `synapse_mem`, `spike_fifo`)

A layer stores the states of its N_POST neurons and its weights. The weights
are a flat array indexed `pre * N_POST + post`, with a combinational read.

When a presynaptic index arrives, the layer walks over all its neurons, one
per cycle. For each one it reads w[pre][post], updates the neuron and writes
the state back. Every neuron that fires is pushed, by index, into a 4-entry
output queue. The input layer is built with `ONE_TO_ONE`: index i feeds only
neuron i, so an event costs a single cycle.

Timing:

- The layer takes a new event in the last cycle of the current walk, so it
  sustains one event per N_POST cycles.
- If a neuron fires while the queue is full, the walk holds in place (a
  *stall*) until the queue has room. No spike is ever lost.
- After reset, and after every `clr` pulse, the layer spends N_POST cycles
  setting all neurons to Vrest and silence. This is how a new input sample
  starts from a clean state.

In the core, the three layers form a pipeline linked by their queues. The
cost of one input event is:

- 1 cycle in l2;
- N_L1 cycles in l1 for each l2 spike;
- 16 cycles in l0 for each l1 spike.

An uncontested event reaches AER out 5 cycles after it is accepted at AER in,
when a single synapse fires on each layer.

### Addresses (`aer_in_decoder`)

An event leaving core d carries the 14-bit address `{d, l0 index}`, which is
16·d + k. A receiving core integrates the event in the l2 neuron with that
number. So each (source core, output neuron) pair has its own input neuron and
its own input weight.

The decoder at AER in consumes and flags (`drop`) any address at or beyond
N_L2. A wrongly mapped source therefore cannot block the bus.

### Programming

All cores share one configuration port, `core_cfg_t`. Each write carries:

- `dev`: the core addressed;
- `target`: which memory is written (see below);
- `pre`, `post`: the weight's indices;
- `data`.

The targets are:

- `CFG_W_IN`: input weight of l2 neuron `pre`;
- `CFG_W_21`: weight from l2 neuron `pre` to l1 neuron `post`;
- `CFG_W_10`: weight from l1 neuron `pre` to l0 neuron `post`;
- `CFG_VTH` / `CFG_VREST`: threshold or rest voltage of the layer named by
  `post[1:0]` (0 = l0, 1 = l1, 2 = l2).

Weights are not reset. Every weight a test reads must have been written first.

## 2. The segmented bus

### Map

There are five switch columns on each lane. Each column has one device above
the lanes (side 0) and one below (side 1), and device d = 2·column + side:

| column | above (side 0) | below (side 1) |
|--------|----------------|----------------|
| 0 | d0 big-1 | d1 big-2 |
| 1 | d2 big-1 | d3 little-1 |
| 2 | d4 little-1 | d5 little-2 |
| 3 | d6 sensor | d7 little-2 |
| 4 | d8 big-2 | d9 actuator |

Which of each column's places hold big cores, little cores, the sensor and the
actuator follows the platform drawing. The drawing does not say which of the
two big (or two little) configurations each core has. This design gives each
configuration to two cores; the assignment is the function
`mubrain_pkg::dev_kind`.

### Switch (`seg_switch`)

Between columns c and c+1 of a lane lies segment c. Each segment carries a
rightward and a leftward stream. The switch of column c can do any legal
combination of the following:

- **inject:** put one of its two devices' events onto the segment to its
  right, the segment to its left, or both;
- **pass:** join the left and right segments, separately for each direction;
- **deliver:** hand the traffic that arrives from the left, from the right, or
  from the other device of the column (a *local* connection that uses no
  segment) to either device.

### Multicast handshake

This is the subtle part of the design. An event travels with `valid` (the
request) and with a `go` bit. `ready` runs back along the path and is the AND
of the readies of every receiver of the sender. At the sender's switch, that
AND becomes `go` and is sent forward with the event.

A receiver takes the event only when it sees `rx_commit = valid & go`. So
either every receiver of a multicast takes the event in the same cycle, or
none does. Without `go`, a ready receiver would take the event again in every
cycle while another receiver held the send back.

The logic has no combinational loop:

- requests never depend on readies;
- readies never depend on `go`;
- a receiver's ready is chosen from the requests only.

Verilator's lint still reports UNOPTFLAT on the chained arrays. The headers of
`segmented_bus` and `many_core_mubrain` explain why this is a false loop.

### Bus port (`bus_port`)

A device may send on several lanes. Its event is offered on every lane the
controller mapped for it, and the device is released once all those lanes
have taken it. An event from a device with no route is discarded.

A device may also receive on several lanes. The port picks one requesting
lane round robin, and hands the event to the device when that lane commits.
The pointer moves on every cycle in which some lane requests, whether or not
the chosen lane committed. This way a multicast that another receiver is
holding back cannot shut out the other lanes. `dev_contend` shows when two
lanes request at the same time.

### Bus controller (`bus_controller`)

The controller holds a table of up to 16 routes, `{valid, src, dst, lane}`.
The table is written before the application runs; finding a good mapping is
an offline job.

From the table the controller derives every switch setting:

- **Rightward route:** inject at the source column, pass on every column in
  between, and deliver from the left at the destination.
- **Leftward route:** the mirror image.
- **Route within one column:** a local connection.

Routes from one source on one lane merge into a multicast tree. The
controller also reports the following:

- `seg_power`: segments used by some route. The others can stay unpowered;
  power gating itself is not modelled.
- `tx_lane_en`: the lanes each device sends on.
- `conflict`: set when two routes would clash. A clash is any of:
  - two senders on one segment;
  - one segment used in both directions;
  - two directions feeding one receiver;
  - a second sender entering a segment run that is already passing through.

The outputs are registered. A table write reaches the switches two clock
edges later.

The bus adds no clock cycle. An event crosses any number of segments in the
cycle in which it is committed.

## 3. Top level (`many_core_mubrain`)

The top instantiates the bus controller, the segmented bus, one `bus_port`
per device, and the eight cores. The sensor and actuator are outside the
design. The sensor is a valid/ready AER input (`sensor_*`), sent into the bus
from device 6. The actuator is the AER output (`act_*`), taken from device 9.

Status outputs:

- routing conflict;
- segment power and activity;
- per device: busy, fire and stall per layer, drop, and lane contention.

The core sizes are top parameters. They default to the four configurations.

A typical use:

1. Reset.
2. Write the route table.
3. Program weights, thresholds and rest voltages.
4. Pulse `clr` (or rely on reset).
5. Stream sensor events.
6. Wait until `dev_busy` is zero.
7. Pulse `clr` before the next sample.

## 4. Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| tb_if_neuron | every (state, weight, Vth, Vrest) case against an independent rule |
| tb_synapse_mem | random writes/reads against a shadow array, write-read collision |
| tb_aer_in_decoder | in-range, edge and out-of-range addresses, drop flag |
| tb_mubrain_layer | fully connected and one-to-one layers against a model, N_POST-cycle event rate, queue-full stalls, clear sweep |
| tb_mubrain_core | a 16x8x16 core against a three-layer model, `{DEV_ID, neuron}` output addresses, dropped inputs, 5-cycle latency |
| tb_seg_switch | random settings and traffic; segments, deliveries, readies, go and commit |
| tb_bus_controller | switch settings, power, lanes and conflicts for chosen route sets |
| tb_segmented_bus | six routes on two lanes (local, left, right, multicast); delivery, AND-of-readies, commit, idle unpowered segments |
| tb_many_core_mubrain | end to end at reduced core sizes: sensor → little-2 → (multicast) little-1 and big-2 → actuator on two lanes |
| tb_many_core_full | the same scenario with the top at its default (full) sizes |
| tb_workload_conv | a convolution + pooling sub-network (16x16 image, shared 3x3 kernel at stride 2, 2x2 pooling) on a full-size little-1 core, every output event against an event-by-event model |

The end-to-end tests count every mechanism, and a mechanism that never occurs
counts as a failure. The mechanisms are:

- local, leftward, rightward and multicast transfers;
- two lanes into one core;
- traffic while segments are unpowered;
- a flagged routing conflict;
- layer stalls;
- dropped addresses;
- spikes in all three layers;
- a clear between two batches.

They also check every actuator event against the expected set. The full-size
run takes about 15 s with Verilator.

To run one test with plain Verilator (from the folder that holds `rtl/` and
`tb/`):

```
verilator --binary --timing --assert -Irtl -Itb rtl/mubrain_pkg.sv \
    tb/tb_many_core_full.sv --top-module tb_many_core_full -Mdir obj -o sim
./obj/sim
```

Weights are not reset; every test writes each weight it reads. Starting
with random state (`+verilator+rand+reset+2`) is a good check of that.

## 5. Capacity and the evaluated networks

The eight cores hold 54,528 neurons and 143,380,992 synapses at once. The five
networks the platform is evaluated on need between 80,271 neurons (LeNet) and
448,484 (VGGNet). None of them fits at one time, so they must be cut into
sub-networks and time-multiplexed. Between batches, software reloads weights
and routes through the two programming ports.

The largest fan-in per neuron does fit. The evaluated networks need at most
2,566 hidden-layer and 14,772 input-layer neighbours, against 4,096 and 16,384
in a big-2 core.

## 6. Departures and limits

- **Clocked, not clock-less.** The neurons of a layer share one update unit,
  so an event costs up to N_POST cycles, where the original updates all
  neurons in parallel. The queues, the clear sweep and the stall are needed
  only because of this.
- **Widths and interfaces are this design's choices:** the 8-bit membrane, the
  saturation at -128, the 14-bit address, the `{device, neuron}` address
  scheme, the configuration port, and the valid/ready handshake with `go`.
- **The switch's internals and the route-table controller are this design's
  construction.** The platform describes only their task: switches that cut
  and join segments, and a controller that sets them from a mapping found by
  profiling.
- **Not implemented:**
  - the compiler and run-time manager software that split a network and
    schedule its pieces;
  - the sensor and the actuator;
  - power gating of segments (only indicated through `seg_power`);
  - the process-specific, asynchronous circuit implementation.
- **Big-2 cores are large in simulation.** Their l1 weight array alone has
  67,108,864 entries, so any tool that flattens memories needs time and memory
  for them.
