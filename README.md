# A hybrid spiking/artificial chip that sends only spikes between dies

A neural network split across several dies pays most for the traffic on the
die-to-die links: a serial link that carries a dense 8-bit activation for every
neuron is slow and power hungry. This design keeps dense arithmetic inside a
die and makes the die boundary sparse. Every die is an 8 x 8 mesh of neural
cores:

- The 36 interior cores are **artificial (ANN) cores**. Each has 256 neurons that
  compute 8-bit multiply-accumulate sums over 256 inputs with ReLU outputs.
- The 28 cores on the mesh edge are **spiking (SNN) cores**. Each has 256
  leaky integrate-and-fire neurons.

The edge ring is the only part of a die that talks to the die-to-die
interfaces (EMIO). So whatever leaves a die is a spike, and a neuron that does
not fire sends nothing. Inside the die, each core converts what it receives to
its own kind of signal:

- A spiking core turns an incoming activation into a train of spikes by rate
  coding.
- An artificial core turns the spikes it counts over a time window back into an
  activation.

The RTL covers one die: the mesh, both core kinds with their converters,
schedulers, memories and processing elements, and the four EMIO sides with
their serial links. The top module is `hnn_chip`.

## Packets

Every message is one 35-bit packet (`hnn_pkg::packet_t`):

| field   | bits | meaning |
|---------|------|---------|
| dx      | 9    | signed hops still to go in x (East positive) |
| dy      | 9    | signed hops still to go in y (North positive) |
| type    | 1    | 0 = activation, 1 = spike |
| axon    | 8    | input line of the destination core |
| payload | 8    | activation value, or for a spike `{4'b0, delivery tick}` |

- **Relative offsets:** a packet's destination is given as offsets from where it
  is. Each router steps the offset toward zero as the packet leaves it. The
  packet is delivered to a core when both offsets are zero.
- **Reach:** nine signed bits allow ±255 hops. Because the offsets are
  relative, a packet keeps its remaining offsets when it crosses into the next
  die, so it can cross several dies.
- **Local word:** the core itself sees only the 17-bit word `{type, axon, payload}`.
- **Link word:** on a die-to-die link the packet gets a 3-bit tag in front,
  making a 38-bit word.

## The mesh and its routers

`noc_router` is a five-port router: North, East, South, West and the local core.

- **Buffering:** each input has a 4-deep first-word-fall-through FIFO
  (`sync_fifo`).
- **Routing:** static dimension order. A packet first travels East/West until dx
  is 0, then North/South until dy is 0, then goes to the local port. X-first
  dimension-order routing cannot deadlock on a mesh.
- **Arbitration:** each output serves its requesting inputs round-robin.
- **Throughput:** one packet per output per cycle.
- **Handshakes:** all links use valid/ready. A packet moves on a cycle where
  both are high.

`hnn_chip` places the routers on an 8 x 8 grid:

- x grows to the East and y to the North.
- A router's North port faces its neighbour at y+1.
- On the mesh boundary, the outward port of an edge core connects to the EMIO
  of that side. Core (x, 7) is index x of the North EMIO, and core (0, y) is
  index y of the West EMIO. A corner core belongs to two sides.

## Core tiles

Both core kinds have the same six parts:

- the router;
- a converter for packets arriving from the other kind of core;
- a packet scheduler that holds the inputs of the coming time steps;
- the core memory;
- a processing element of 256 neuron lanes;
- a controller.

Time is divided into **ticks**, a global pulse on the `tick` input. Every core
computes in **passes**: on a tick the controller sweeps the axons (inputs) of
the core, one per clock cycle, through all 256 lanes at once. The weights stay
in place and the input is broadcast, so a pass over a full 256 x 256 layer
takes 256 cycles.

### Weights and the core memory (`core_sram`)

Each core has the following storage:

| part | contents |
|------|----------|
| crossbar | 256 x 256 bits; bit (a, n) says axon a connects to neuron n |
| axon types | a 2-bit type per axon |
| neuron configuration | one `neuron_cfg_t` per neuron |
| axon input potentials | an 8-bit potential per axon, used by spiking cores only |

- **Weights:** a connection does not carry its own weight. A neuron has four
  signed 8-bit weights, one per axon type, and uses the one matching the type
  of the axon that fires. This is the same scheme as TrueNorth-style
  neurosynaptic cores, and it keeps one core's memory around 13 KB.
- **Neuron configuration:** each `neuron_cfg_t` holds the four weights, a
  threshold, a leak shift, an output shift, an enable bit, and the output
  packet's destination (dx, dy, axon, delivery tick).
- **Configuration port:** `cfg_we`, `cfg_region`, `cfg_addr`, `cfg_data`. The
  regions are crossbar rows, neuron entries, axon types, and controller
  registers.
- **Control registers:** enable (reset 0), pass period (ticks per pass, default
  1) and window T (default 16).

### Spiking cores

**Scheduler (`snn_scheduler`)**

- The scheduler is a ring of 16 rows of 256 bits. Row r holds the axons that
  spike r ticks from now.
- An incoming spike sets its axon's bit in the row of its 4-bit delivery tick.
  The delay is counted from the next tick, so tick 0 means "at the next tick".
- On each tick the controller takes and clears the current row.

**Pass and neuron update (`neuron_block`)**

- The pass visits only the axons whose bit is set (zero skipping), one per
  cycle.
- For each visited axon, every connected neuron adds the weight for that
  axon's type to its input I.
- At the end of the pass each neuron applies the leak and fire rule
  `U <- sat8(U + ((I - U) >>> k))`, which is the leaky form
  `U <- beta*U + (1-beta)*I` with `beta = 1 - 2^-k`.
- A neuron fires when `U >= threshold`, and its potential then resets to 0.
- Each neuron that fires and has its enable bit set sends one spike packet to
  its configured destination.

**Activation-to-spike converter (`clp_a2s`)**

- Activations arriving from artificial cores go through this converter. It
  adds the activation to the axon's stored input potential V (saturating at
  255) and hands the sum to the controller.
- The controller writes the sum back to V and rate codes it: an axon whose sum
  is `a` in a window of T ticks spikes on the next `floor(a/T)` ticks.
- When a second activation reaches the same axon within a window, the
  controller schedules only the extra spikes, `floor(new/T) - floor(old/T)`. A
  repeated input therefore extends the train rather than restarting it.
- Every T ticks the input potentials are cleared, which closes the window.

### Artificial cores

**Scheduler (`ann_scheduler`)**

- The scheduler has 16 rows of 256 entries. Each entry is 8 bits plus a flag
  that says whether it holds an activation or a spike count.
- Incoming data fills the current row.
- At the start of a pass the current row becomes the pass row and the next row
  starts filling. This lets packets keep arriving during a pass.

**Spike-to-activation converter (`clp_s2a`)**

- This converter counts the spikes that arrive at an axon during a window. It
  reads the axon's entry, adds one (saturating at 255) and writes it back
  flagged as a count.
- The pass converts a count S into the activation `floor(255*S/T)`.
- A spike whose delivery tick is not below T is converted on the spot.
- An artificial core that receives spikes is given a pass period of T, so that
  each pass sees a whole window of counts.

**Pass and MAC (`mac_block`)**

- The pass visits all 256 axons, with no zero skipping.
- For each axon, every connected lane adds the product of a signed 8-bit
  weight and the unsigned 8-bit activation to a 32-bit accumulator.
- At the end each lane outputs `clamp(ReLU(acc >>> shift), 0, 255)`.
- After every pass, every enabled neuron sends its activation, zeros included.

### Controller (`core_controller`)

The controller has these states:

| state | what it does |
|-------|--------------|
| IDLE | waits for a tick |
| START | takes the scheduler row |
| PASS | sweeps the axons, one per cycle |
| STEP | updates the neurons |
| SETTLE | lets the outputs settle |
| EMIT | sends one packet per cycle to the router |

- **Input:** words from the converter are accepted in every state, in one cycle
  each.
- **Stall:** a tick that arrives while a pass or emission is still running is
  queued (up to 15). The controller pulses `stall`, which the top exposes per
  core.
- **Pass length:** a spiking pass costs one cycle per active axon plus one. An
  artificial pass costs 257 cycles. Each output packet then costs one cycle,
  more if the router pushes back.

## Die-to-die interface (EMIO)

Each side of the die has one `emio`. It has two directions.

**Outbound: `emio_merge` then `emio_serializer`**

- The merge has a FIFO for each of the side's 8 edge cores. It picks one
  packet at a time, round-robin, and puts the core's index (0 to 7) in the
  3-bit tag.
- The serializer shifts the 38-bit word out one bit per cycle.
- It holds `req` high during the 38 beats of the frame, then waits for the
  receiver's one-cycle `ack` before starting the next word.

**Inbound: `emio_deserializer` then `emio_split`**

- The deserializer shifts the bits in while `req` is high. It offers the
  complete word, and pulses `ack` when the split block takes it.
- The split block strips the tag and queues the packet for edge core number
  `tag` on its side.

**Timing and sizes**

- A word leaves the serializer 38 cycles after it is taken, and is available
  at the far side 39 cycles after it is taken.
- The next word starts after the ack returns.
- The links are point-to-point: the East output of one die is wired to the
  West input of the next. Core k of one side therefore feeds core k of the
  facing side, which for East/West is the same row.
- The 8 x 4 = 32 outgoing edge ports share four serial outputs, and the 32
  incoming ports share four serial inputs.

## Using the RTL

All modules share `rtl/hnn_pkg.sv` (packet and configuration types, widths,
and the two conversion functions). Each block has a self-checking testbench in
`tb/`, which prints `TB_RESULT checks=N failures=M`. To run one with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/hnn_pkg.sv \
    tb/tb_noc_router.sv --top-module tb_noc_router -y rtl
./obj_dir/Vtb_noc_router
```

`tb_hnn_chip` runs the whole die at its default size, 64 cores of 256 x 256.
The test, end to end:

- It programs a small hybrid network along row 3.
- It injects a spike through the West serial link.
- The spike is converted to an activation, scaled through five artificial
  cores, and converted back to a spike train.
- The spikes leave through the East serial link, and the test checks each one.
- It also counts the mechanisms along the way: stalls, spike counting,
  rate-coded trains, Y-turns in the mesh, and die-to-die words in each
  direction. It fails if any of them never happened.

It builds and runs in well under a minute.

`tb_fc_layers` also runs at the default size. It maps two dense 256 x 256
layers onto two artificial cores, with random crossbars, axon types and
weights. It sends 256 activations in over the West link and checks all 256
outputs that leave over the East link against its own model of the two
layers.

`tb_two_chips` joins two full-size chips East-to-West and follows four
activations (0, 40, 100 and 255) through the whole path:

- An artificial core computes them, and the edge core of the first chip rate
  codes them into 0, 2, 6 and 15 spikes.
- Only those 23 spike words cross the link; the zero activation sends nothing.
- The spikes fire the edge core of the second chip.
- An artificial core there counts them over a 16-tick window and turns them
  back into the activations 0, 31, 95 and 239. These are the inputs quantised
  to 16 levels.

The default parameters are the sizes of the design: 8 x 8 mesh, 256 axons and
256 neurons per core, a 16-row scheduler, and a 1-bit serial link. The
testbenches of the smaller blocks override some of them to keep runs short.

## Where this RTL departs from the description it follows

The design follows a published description of the architecture. That
description gives the organisation, the packet fields, the memory and
scheduler sizes and the conversion equations, but leaves many details open.
The main points are:

- **Weight storage.** The description gives 32-bit weights in one place and an
  8 x 8-bit MAC in another. The core memory size it gives leaves no room for a
  weight per synapse. This RTL uses 8-bit weights, four per neuron, selected
  by axon type.
- **Memory layout.** The description gives a 256 x 410-bit core memory made of
  named fields that do not add up. The layout here (256 crossbar bits per axon
  plus a 79-bit record per neuron) is this design's own. All memories are
  register arrays, not SRAM macros.
- **Clocking of the EMIO FIFOs.** These are drawn as asynchronous, but the text
  gives one synchronous clock at the die boundary. The FIFOs here are
  single-clock.
- **Die-to-die latency.** The description gives 76 cycles per packet, of which
  38 are serialisation. Here deserialisation overlaps serialisation, so a
  packet crosses in about 39 cycles, plus the ack turn-around before the next
  word.
- **Where an activation is accumulated.** The description says the converter
  adds an activation to "the spiking neuron's potential". Here the sum is kept
  as an input potential per axon, and that axon's spike train is generated from
  it. The neurons' membrane potentials are not touched by the converter.
- **Spike-to-activation scale.** One drawing passes the raw 8-bit spike count
  on; the equation scales it by `255/T`. The equation is followed.
- **Mesh orientation.** North is +y. Mirroring the convention changes nothing
  else.
- **Things not described and chosen here:**
  - FIFO depths, arbitration, and the link handshake order;
  - the LIF leak as a shift, saturation, and reset-to-zero after a spike;
  - ReLU with a per-neuron shift for requantisation;
  - the controller sequencing and stall queue, and the pass period register;
  - the window-closing rule, and the "only extra spikes" rule for repeated
    activations;
  - the configuration bus;
  - the tick as a chip input.
- **Not built:**
  - the network-mapping repeater cores, which forward packets whose offsets
    exceed the 9-bit range (the description only names them);
  - the I/O pads.

How large a model fits: one die has 64 x 65,536 = 4.2 M synapse positions,
with four weight values per neuron. The networks the architecture was
evaluated with (a 19 M-parameter RWKV text model, MS-ResNet-18 and an
EfficientNet-B4 variant) need several dies, and per-synapse weights would need
more memory than a core has.
