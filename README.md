# A 3D network-on-chip of spiking cores with on-chip STDP

This design is a many-core chip for spiking neural networks (SNNs). Every core simulates 256
leaky integrate-and-fire (LIF) neurons that share 65,536 eight-bit synapses. The cores are
stacked in a three-dimensional mesh. Neurons talk to each other only through small packets:
a spike is a single flit that says which neuron fired in which core.

The main idea is that communication and computation are decoupled by **time steps**:

- during step *t* every core integrates the spikes that reached it during step *t-1*;
- meanwhile, it collects the spikes arriving for step *t+1*.

The network can therefore deliver spikes in any order and with any delay, as long as they arrive
before the next step begins. The same network carries configuration. Weights, thresholds and
routing tables are written with memory-access flits. Weights can also be read back, and a reply
flit is returned.

Learning is a simplified spike-timing-dependent plasticity (STDP) rule. For each neuron that
fired, an input that spiked shortly *before* gets its weight raised by one. An input that spiked
shortly *after* gets its weight lowered by one. A small learning block runs this once per time
step, a few steps behind the current one, when the "after" spikes are already known.

## System organisation

```
 host ── W port of node (0,0,0)
          │
   ┌──────┴─────────── MX x MY x MZ mesh (default 3 x 4 x 3 = 36 nodes) ─────┐
   │ node = 7-port router (Local, North, East, West, South, Up, Down) + PE  │
   │ Up/Down are the links between silicon layers                            │
   └─────────────────────────────────────────────────────────────────────────┘

 PE:  ni ──set──> pre-synaptic spike memory ──array──> snpc ──array──> post-synaptic memory
       ^   └rset─> remote-recurrent memory ─────────────^  │                 │
       └──────────────── output array (sent as flits) <────┘ <── own recurrent (previous step)
```

| File | Role |
|---|---|
| `snn_pkg` | Flit layout, port names, helper functions (parity, field access, flit builders). |
| `snn_top` | The mesh. It also connects the host link, the tick and the done signals. |
| `router` | Seven input ports, a switch allocator and a crossbar. |
| `router_input_port` | 4-flit FIFO, stop signal and XYZ route computation. |
| `switch_allocator` | Round-robin arbiter, one per output port. |
| `router_crossbar` | One-hot multiplexers. |
| `pe` | Processing element. |
| `pe_ctrl` | Time-step controller. It manages the step counter and the slot selection, and starts the core, the sender and the learning block. |
| `ni` | Network interface: flit decode, address tables, configuration writes, read replies, spike-flit generation. |
| `address_lut` | Source core → connection → base row; destination table. |
| `address_generator` | Running pointer for burst writes. |
| `spike_memory` | Ring of N-bit spike arrays, one per time step. |
| `snpc` | The spiking neural processing core. |
| `snpc_ctrl` | Phase sequencer of one step. |
| `spike_decoder` | Turns an array into indices, lowest first. |
| `weight_sram` | 256 rows × 256 weights × 8 bits; one row read per input spike. |
| `recurrent_crossbar` | Fixed negative lateral weight. |
| `lif_neuron` | 256 instances per core. |
| `learning_block` | STDP. |

## Flits

All traffic is single-flit, 45 bits wide. Bit *i* below is `flit[i]`.

| bits | spike flit | memory-access flit |
|---|---|---|
| 0 | type = 0 | type = 1 |
| 9:1 | destination core {z[9:7], y[6:4], x[3:1]} | same |
| 18:10 | source core | 11:10 memory type (0 weight, 1 tables, 2 other registers, 3 read reply), 12 write |
| 31:19 | neuron ID | 31:13 data (19 bits) |
| 32 | even parity over 31:0 | same |
| 44:33 | zero | zero |

A flit whose parity is wrong is dropped by the network interface, and `o_parity_err` pulses.

The host has the address `9'h1FF`. Every router sends flits for that address toward node (0,0,0)
and then out of its West port. Routing is dimension-ordered: X first, then Y, then Z.

Links use valid/stop flow control. A receiver raises `stop` while its buffer is full, and a
sender never drives `valid` while it sees `stop`. The router checks this rule with an assertion.

### Configuration data encodings

The data field `d` is 19 bits wide.

**Tables (memory type 1)**

| d[18:17] | Writes | Fields |
|---|---|---|
| 0 | source table entry | source core `d[12:4]`, valid `d[3]`, recurrent `d[2]`, connection number `d[1:0]` |
| 1 | base row of a connection | connection `d[9:8]`, base `d[7:0]` |
| 2 | destination entry | index `d[11:10]`, valid `d[9]`, core `d[8:0]` |

**Other registers (memory type 2)**

| d[18:16] | Action |
|---|---|
| 0 | Set the weight pointer to `d[15:0]`, which is {row, neuron}. |
| 1 | Write `d[15:0]` as the threshold of the next neuron. The threshold pointer then increments. |
| 2 | Set the threshold pointer. |
| 3 | Switch learning on or off with `d[0]`. |

**Weights (memory type 0)**

- A write stores `d[7:0]` at the weight pointer, and the pointer then increments. Loading a whole core is therefore a burst of 65,536 flits after one pointer write.
- A read carries the core that receives the reply in `d[8:0]`. The reply is a type-3 flit with data `{replying core, 2'b00, weight}`.

## One time step inside a core

The host pulses `i_tick` once every core reports `o_done` and no flits are left in flight.
Each core then does the following:

1. **Advance the step counter.** Clear the spike-array slot that collects arrivals for the next
   step. Start the core on the array collected during the previous step.
2. **Forward phase.** The spike decoder takes the lowest set bit each cycle: a one-hot mask
   `x & -x`, then an XOR to erase that bit. Each index selects one 256 × 8-bit row of the weight
   memory. All 256 neurons add their weight in the same cycle, so the cost is one cycle per input
   spike, not one per synapse.
3. **Recurrent phases.**
   - The core's own output array of the previous step goes through the same decoder. Each index
     adds the fixed weight `W_REC` (−16) to every neuron except the one that fired.
   - Spikes from other cores of the same layer go through the decoder next, marked *recurrent*
     in the source table. Each one adds `W_REC` to every neuron.
   - This is the lateral inhibition used by competitive STDP networks.
4. **Leak, then fire.**
   - Leak: every neuron adds −`LEAK`.
   - Fire: a neuron whose potential is at least its threshold spikes. Its potential returns to 0,
     and it ignores input and leak for `REFRAC` steps.
   - While learning is on, a spike raises that neuron's threshold by `THETA_PLUS`. A silent step
     lowers it by `TH_DECAY`, never below the programmed value.
5. **Write the output array.**
   - The array is stored in the post-synaptic memory.
   - The network interface sends one spike flit per set bit to each valid destination.
   - If learning is on, the learning block starts on step *t − WIN*.

`snpc_ctrl` raises `o_end` 8 + F + L + R + (P > 0 ? P + 2 : 1) cycles after the start, where:

- F is the number of input spikes;
- L is the number of own recurrent spikes;
- R is the number of remote recurrent spikes;
- P is the number of neurons that fired.

The testbenches check this count.

## The learning block

The learning block uses two OR registers. The pre-synaptic arrays of steps tc−WIN … tc go into
*spike_before*, and those of tc+1 … tc+WIN go into *spike_after*.

For every neuron *j* that fired in step *tc*:

1. Each input *i* in *spike_before* is decoded, lowest first.
2. Its weight `(i, j)` is read, incremented, saturated to [0, 127] and written back through a
   one-cycle address pipeline.
3. *spike_after* is handled the same way with a decrement.

If nothing fired in *tc*, the block ends one cycle after it starts. Otherwise it takes
2 + (2·WIN+1) + P·((B+3)+(A+3)+1) cycles, where B and A are the sizes of the two registers.

While the learning block runs, the network interface holds memory-access flits back. Spikes are
still accepted.

## Address translation

A core never sees global neuron numbers. The source table maps the sending core to a connection
number and a recurrent flag. The connection has a base row. The synapse row is

```
row = base[connection] + neuron_ID
```

This means:

- a layer can be split over several cores;
- several sources can share the 256 rows of one core;
- the table needs only one entry per source core.

## Parameters and where they come from

| parameter | default | origin |
|---|---|---|
| N (neurons / core), N_PRE (synapse rows) | 256, 256 | published |
| weight width | 8 bits | published |
| router ports | 7 | published |
| flit layout | 45 bits | published field positions |
| mesh | 3 × 4 × 3 | read from the published mesh drawing |
| router buffer depth | 4 flits | read from the published drawing |
| membrane width | 16 bits, saturating | own choice |
| LEAK | 1 | own choice |
| REFRAC | 2 | own choice |
| W_REC | −16 | own choice |
| THETA_PLUS / TH_DECAY | 4 / 1 | own choice |
| spike-memory depth | 8 steps | own choice |
| STDP window WIN | 2 steps | own choice |
| weight saturation | [0, 127] | own choice |
| destination table size | 4 | own choice |
| connection numbers | 4 | own choice |

The following are also this design's own:

- all configuration encodings;
- the type and memory-type codes;
- the parity placement;
- the host attachment;
- the XYZ routing;
- the round-robin arbitration;
- the tick/done handshake.

## Departures and gaps

- **Weight normalisation is not built.** This is the rule that keeps the sum of each neuron's
  weights constant. The update is only the ±1 rule.
- **Fault tolerance is not built.** The link and through-silicon-via (TSV) fault-tolerance
  machinery (detectors, encoders, NACK) is not included. The vertical links are plain links.
- **No CAM for sparse connections.** The alternative content-addressable table for very sparse
  connectivity is not included.
- **Fan-in is limited to 256.** A neuron can have at most 256 synapses, since a core has 256
  rows and there is no way to add partial sums across cores. The published MNIST networks
  (784-input layers; 1200-neuron fully connected layers) therefore cannot be mapped as they are.
  Smaller layers, and layers whose fan-in has been reduced to 256, can.
- **The host must drain the network before each tick.** Time-step synchronisation is a global
  tick. The host must wait until all cores are done *and* the spikes they sent have arrived. A
  spike that arrives after the tick is counted one step late.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. `tb/snn_model_pkg.sv` holds an
integer reference model of a core. The model assumes no saturation, so tests keep values small.

- **`tb_pe`** configures one 16-neuron PE through flits. It runs 30 steps with random input
  flits and random stops on the output. Each step's output spike flits are compared with the model.
- **`tb_snn_top`** runs end to end on a 2 × 1 × 2 mesh of 16-neuron cores.
  - Layer-1 core A feeds cores B and C one layer up. B and C inhibit each other and report to
    the host.
  - Forty inference steps are compared flit by flit. Weights are read back and compared.
  - Twelve learning steps must change weights within the expected bounds.
  - A corrupted flit must be flagged.
  - The test counts each mechanism and fails on any count of zero: vertical-link traffic, X-link
    traffic, back-pressure, remote recurrent spikes, local and remote inhibition, refractory
    steps, learning runs, replies and parity errors.
- **`tb_snn_top_full`** runs the chip at its default size (36 cores of 256 neurons). It programs
  the far-corner core over five hops and runs ten steps against the model. It takes several
  minutes under verilator.

To run a testbench with verilator:

```
verilator --binary --timing --assert -Wno-fatal rtl/snn_pkg.sv rtl/*.sv tb/snn_model_pkg.sv tb/tb_snn_top.sv \
          --top-module tb_snn_top -o sim && ./obj_dir/sim
```

`snn_pkg.sv` must come first; `-Wno-fatal` keeps lint-style warnings from stopping the build.
