# AIGOR spiking-network node in SystemVerilog

AIGOR runs spiking neural networks as a set of processing cores that advance
one discrete timestep together. Inside a timestep everything is event
driven. Only neurons that actually fire produce traffic. Each spike travels
as a packet and fetches its fanout from the receiving core's synaptic
memory, and its weights are accumulated into delay buffers. At the end of
the timestep every neuron is updated once. Then every core broadcasts a
*sync* event. A core moves on to the next timestep only after it has seen
the syncs of all cores it listens to: a distributed barrier with no central
clock or controller.

This RTL implements one node of such a system. The node has two SNN cores
that host and update neurons, and two I/O cores. The I/O cores turn images
or Poisson rates into spikes and count the spikes that come back. All
sizes are parameters. The defaults give one core 8 workers of 32 neurons,
with one datapath per neuron, 8 synapse lanes and 16384 synaptic rows.

## Events

Cores exchange exactly one kind of packet, `event_t` (49 bits, see
`rtl/aigor_pkg.sv`):

| field | bits | spike | sync |
|---|---|---|---|
| `sync` | 1 | 0 | 1 |
| `ts` | 16 | timestep of the spike | timestep that is closing |
| `id.core` | 12 | sending core | sending core |
| `id.w` | 10 | worker in that core | unused |
| `id.n` | 10 | neuron in that worker | unused |

The triple `<core, worker, neuron>` is the presynaptic identifier **ID_pre**.
The fabric must keep the order of events from one sender to one receiver,
since a core's sync of `t` has to arrive after all of its spikes of `t`. No
other ordering is required. Spikes of `t+1` from a faster core may overtake
the slow core's own barrier, and they are handled correctly.

## Synaptic memory image

Each SNN core holds the connectivity of every source that targets at least
one of its neurons. There are three structures, all written by the host
over the configuration bus:

1. **ID_pre table** (`CFG_ADDRT`). It is indexed by the low 3/5/7 bits of
   core/worker/neuron, so it has 2^15 entries. Entry data is
   `{valid, row[13:0]}`. A spike whose entry is not valid is dropped at the
   core's input.
2. **Header row** (`CFG_SYNMEM`, address `row*P + 0`). It holds
   `{fanout[13:0], ID_pre[31:0]}`.
3. **Synapse rows**. These are the `ceil(fanout/P)` rows that follow the
   header, with `P` 67-bit synapse words per row:

| field | bits | meaning |
|---|---|---|
| `post.w` | 10 | target worker |
| `post.n` | 10 | target neuron in the worker |
| `post.r` | 4 | receptor: 0 excitatory, 1 inhibitory |
| `post.comp` | 4 | compartment (carried, unused) |
| `delay` | 7 | delay in timesteps, 1 .. MAX_DELAY-1 |
| `weight` | 32 | signed fixed point, 20 fraction bits |

The synapse word is 67 bits wide: the field widths add up to 67. Some
descriptions of this architecture draw the memory as 64 bits wide. Here the
field widths were kept, and the memory slot grows to 67 bits.

`tb/tb_ref.svh` (`ref_net::build_image`) shows how to produce these writes
from a connection list.

## The path of a spike through a core

```
fabric -> event_decoder -> memory_handler <-> synaptic_memory
              |   (row, ts)      | P lanes of synapse words
              |                  v
              |            synapse_router  (one FIFO per lane x worker,
              |                  |          round-robin merge per worker)
              | barrier token    v
              +-----------> W x worker  (delay buffer, neuron state,
                                 |       NPAR neuron_dynamics datapaths)
                                 v
                           spike_arbiter -> fabric
```

- **event_decoder.** Splits spikes from syncs and looks each spike up in
  the ID_pre table. It queues a fanout request `{ts, row}`.
- **memory_handler.** Reads the header row, then streams the synapse rows
  onto `P` lanes, one row per cycle. One spike with fanout `F` occupies the
  handler for `2 + ceil(F/P)` cycles. This serial fetch limits throughput
  when the input is dense: every input spike reads its whole fanout.
- **synapse_router.** Sends each lane word to the worker named by its
  `post.w`. There is a small FIFO for every (lane, worker) pair, and a
  round-robin merge in front of each worker that lets one contribution per
  cycle into that worker.
- **worker.** Adds the weight into its **delay buffer**. Each (neuron,
  receptor) pair has a ring of MAX_DELAY slots, and the contribution goes
  into slot `(spike ts + delay) mod MAX_DELAY`. Because the slot comes from
  the spike's own timestep, a spike that arrives early, during the previous
  timestep's barrier wait, still lands in the right slot.

## Timestep update and folding

When the controller starts timestep `t`, each worker reads slot
`t mod MAX_DELAY` of all its rings, clears it and updates the neurons:

- `NPAR = NPW` (default) is the *spatial* organisation: every neuron has its
  own `neuron_dynamics` datapath, and the update takes one cycle.
- `NPAR = 1` is the *time-multiplexed* organisation: one datapath is folded
  over all neurons, and the update takes `NPW` cycles.
- Anything in between takes `NPW/NPAR` cycles.

Neurons that fire set a flag. After the update the flags are emitted lowest
index first, one per cycle. The spike_arbiter merges the workers round
robin, rewrites `(worker, neuron)` into the global ID_pre with timestep `t`,
and finally sends the core's sync.

A worker is busy for `NPW/NPAR + max(1, spikes)` cycles per timestep.
Contributions cannot enter a worker while it updates.

## Neuron kernels

Arithmetic is 32-bit signed fixed point with 12 integer bits:
`fix_mul(a, b) = (a*b) >>> 20`. Two models share one datapath and are
selected by `NP_MODEL`:

- **LIF with reset by subtraction**, like snnTorch's `Leaky`:
  `V' = decay*V + Iexc + Iinh + Iext - (V > thr ? thr : 0)`. The neuron
  spikes when `V' > thr`.
- **LIF with delta synapses and refractoriness**, like NEST's
  `iaf_psc_delta`, with potentials relative to rest. While the refractory
  counter `Tr > 0`, the neuron decrements `Tr`, holds `V = Vreset` and
  discards its input. Otherwise `V' = decay*V + Iext + Iexc + Iinh`. If
  `V' >= thr` it spikes and sets `V = Vreset` and `Tr = tref`.

A non-leaky integrate-and-fire neuron is either model with `decay = 1.0`.
The parameters (`decay`, `thr`, `vreset`, `tref`, `iext`) are shared by all
neurons of a core. The equations are the standard forms of the two
reference neurons; they are not a transcription of a published datapath.

## The barrier, and why it is safe

This is the subtle part of the design. The state machine in `snn_core` runs
the following sequence for each timestep `t`:

1. **UPD**: start all workers on slot `t` and wait until every worker has
   emitted its spikes.
2. **BCLR**: only at the end of a sample window, see below.
3. **SYNC**: send sync(`t`) after the last spike.
4. **WAIT**: wait for three conditions:
   - the decoder has counted `REG_EXP_SYNC` syncs of `t`, the core's own
     included, since the fabric broadcasts;
   - the memory handler has passed the *barrier token*;
   - the router is empty.
5. Then `t = t + 1`.

The barrier token is what makes this correct. When the last expected sync
of `t` arrives, the decoder does not signal the controller directly.
Instead it puts a token into the same request queue as the spikes, behind
every spike of `t`. When the handler dequeues the token, every fanout row
of `t` has been issued. The router drains after that, so every
contribution of `t` is in a delay buffer before timestep `t+1` reads its
slot.

Sync counting uses two counters selected by the parity of the sync's
timestep. Cores can be at most one timestep apart: a core cannot pass `t`
before everyone has sent sync(`t`). So a sync of `t+1` that arrives while
`t` is still open goes to the other counter and is not lost.
`tb_aigor_node` checks that the cores never drift more than one timestep
apart.

## Sample windows

For inference on a sequence of samples, a non-zero `REG_WINDOW` makes the
core reset all neuron states and delay buffers after every `WINDOW`
timesteps. The reset (state BCLR) happens after the update of the window's
last timestep and *before* the core's sync. So no spike of the next sample
can have reached this core yet: other cores cannot move to the next
timestep before they see this sync.

Spikes of the old sample that are still arriving would pollute the new
sample. The workers drop any contribution whose spike timestep is older
than the first timestep of the current sample (`sample_start`). A clear
takes `NPW/NPAR * MAX_DELAY` cycles.

## I/O cores

An I/O core has the same sync/barrier behaviour as an SNN core, but it
generates its spikes instead of computing them. `REG_IO_MODE` selects one
of:

- **image**: a 28x28 8-bit image written by the host is downsampled to
  16x16 by nearest neighbour (source pixel `floor(i*28/16)`). Pixel `p`
  fires with probability `p/256` in each timestep. This gives 256 sources.
- **Poisson**: `REG_IO_NSRC` sources each fire with probability
  `REG_IO_PROB/65536`. For example, 800 Hz at 0.1 ms is 0.08, i.e. 5243.

Source `i` is sent as ID_pre `<core_id, i div 128, i mod 128>`. The random
numbers come from a 16-bit Galois LFSR (taps `0xB400`, seed `REG_IO_SEED`),
advanced once per source examined. Incoming spikes from other cores appear
on `rec_valid/rec_event`. Spikes of the `{core, worker}` chosen by
`REG_IO_CNTSRC` are also counted per neuron, for the first `NCNT` neurons.

The rate coding and the downsampling method are this design's choices.

## The node and what is outside it

`aigor_node` instantiates `N_SNN` SNN cores (ports `0..N_SNN-1`) and `N_IO`
I/O cores. It does **not** contain the packet router that joins cores
inside a node and across nodes, its routing tables, or the inter-FPGA
link. Every core's transmit and receive event streams are ports of the
node (`tx_*`, `rx_*`), to be connected to such a fabric. The testbenches
use `tb/bcast_switch_model.sv`: a behavioural switch that delivers each
event to every port, with per-receiver queues that drain at random rates.

The host CPU is replaced by the testbench driving the configuration bus.
`cfg_sel` picks a core, and `cfg_bcast` writes all cores at once.

Configuration bus `cfg_t = {we, region[2:0], addr[19:0], data[66:0]}`:

| region | address | content |
|---|---|---|
| `CFG_REGS` | `cfg_reg_e` | `EXP_SYNC`, `NUM_STEPS`, `WINDOW`, `CORE_ID`; for I/O cores `IO_MODE`, `IO_PROB`, `IO_NSRC`, `IO_CNTSRC`, `IO_SEED` |
| `CFG_ADDRT` | source index | ID_pre table entry |
| `CFG_SYNMEM` | `row*P + slot` | header or synapse word |
| `CFG_NEURON` | `nparam_e` | `MODEL`, `DECAY`, `THR`, `VRESET`, `TREF`, `IEXT` |
| `CFG_IMAGE` | pixel | I/O-core image |

Pulse `start` to run `REG_NUM_STEPS` timesteps. The run begins by clearing
all state, and `done` rises when every core has finished.

## Sizes and capacity

At the defaults, one SNN core hosts 256 neurons and 16384 rows of
8 x 67-bit slots, about 8.8 Mbit.

- **MNIST-shaped classifier fits.** A 256-128-10 classifier fed by an I/O
  core needs 138 neurons and 4736 rows on one core.
- **Brunel network does not fit.** A 2048-neuron balanced random network
  needs eight SNN cores, which is four nodes.
- **ID_pre table aliasing.** The table index keeps only 3 bits of the
  source core, so at most eight source cores can be told apart. A larger
  system needs larger `SRC_CB/SRC_WB/SRC_NB` parameters on `snn_core`.

Delays are limited to `MAX_DELAY - 1 = 15` timesteps.

## Where this design departs from the architecture it implements

- Only fixed point is built. Floating point and the adaptive-exponential
  neuron are named options of the architecture but not specified; they are
  absent.
- Only the fixed timestep window marks sample boundaries. The alternative,
  an end-of-sample marker event, is not built.
- The delay field is one total delay. The axonal/dendritic split is not
  modelled.
- The architecture buffers routed words in per-receptor FIFOs in front of
  each worker. Here the router keeps one FIFO per (lane, worker) pair. The
  receptor is resolved only when the contribution is written into the
  delay buffer.
- The fixed-point field widths are tunable only by editing the constants
  in `aigor_pkg` (`DATA_W`, `FRAC_W`). They are not per-core parameters.
- The banked synaptic accumulator, a proposed redesign of the delivery
  stage, is not part of this RTL.
- The register map, the configuration bus, the table indexing, the barrier
  token, the parity sync counters and the controller phases are this
  design's own. So is the inside of the I/O core.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends with
`TB_RESULT checks=N failures=M` and has a watchdog. They compare against
models written in the testbench. `tb/tb_ref.svh` is a behavioural network
model with the same two neuron kernels and the same delay rings.

| testbench | what it checks |
|---|---|
| `tb_sync_fifo`, `tb_rr_arbiter` | ordering, full/empty, fairness |
| `tb_event_decoder` | table lookup, drops, parity sync counting, token placement |
| `tb_synaptic_memory` | writes, row reads, read enable |
| `tb_memory_handler` | lane masks, `2 + ceil(F/P)` cycles per spike, barrier pulse |
| `tb_synapse_router` | per-worker delivery under random back-pressure |
| `tb_delay_buffer` | slot arithmetic, read-and-clear, clear |
| `tb_neuron_dynamics` | both kernels against a 64-bit model |
| `tb_worker` | spatial and time-multiplexed update and emission, cycle counts |
| `tb_spike_arbiter` | ID_pre re-encoding, fairness, sync after spikes |
| `tb_snn_core` | one recurrent core looped through the fabric, spike-exact per timestep, window resets, back-pressure |
| `tb_io_core` | LFSR-exact Poisson and image spikes, barrier, counters |
| `tb_aigor_node` | two SNN cores and two I/O cores end to end, both neuron models; counts back-pressure, barrier skew, drops, multi-row fanouts, inter-core spikes, window resets, both I/O modes |
| `tb_aigor_node_full` | the node at default size running an MNIST-shaped 256-128-10 network for 12 timesteps, spike-exact, and the output counters |

Run any of them with plain Verilator, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert --top-module tb_aigor_node \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/aigor_pkg.sv tb/tb_aigor_node.sv
./obj_dir/Vtb_aigor_node
```

`tb_aigor_node_full` builds and runs in under a minute. It takes about 1200
cycles per timestep, for about 43 input spikes per timestep at 25% input
connectivity. Nearly all of that is the serial fanout fetch.
