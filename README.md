# Astrocyte-enclosed many-core spiking processor

Faults in a spiking neuromorphic chip show up as neurons that stop firing or synapses
that stop passing spikes. The usual fixes copy a whole network, or map it redundantly
onto larger crossbars, and either way the area roughly doubles. This design uses
*astrocytes*, the glial cells that help the brain recover from damaged neurons. An
astrocyte circuit encloses a group of neurons and the synaptic sites they drive. It
tracks their activity through a small set of chemical state variables, and uses that
state to raise the release probability at a synapse whose neuron has gone quiet. A
failed neuron's synaptic site therefore keeps passing spikes: not as many as a healthy
neuron would send, but enough that the downstream neuron keeps part of its input. The
cost is a few astrocytes per core instead of a second copy of the network.

This RTL implements the hardware side of the design methodology in M. Isik, A. Paul,
M. L. Varshika and A. Das, *A Design Methodology for Fault-Tolerant Computing using
Astrocyte Neural Networks*. That covers a many-core chip whose cores are enclosed by
astrocyte circuits, in both core styles the authors propose: a three-layer "uBrain"
core and an N x N crossbar core. The methodology's software half is not hardware and
is not included here. That half splits a trained network into per-core clusters and
decides how many astrocytes each layer needs. Its results enter the chip as weights,
routing tables and the astrocytes-per-layer parameters.

The publication gives the astrocyte equations, the core structures, their sizes and
the 2-bit weights. It does not give the neuron model, number formats, calcium-pathway
equations, the synaptic-site function, the interconnect protocol or the host
interface. Those are this design's own choices, and the sections below mark them.

## Chip organisation

```
            ext_spikes / fault masks / configuration (host)
                               |
   +--------+    +--------+    +--------+    +--------+
   | C0     |----| C1     |----| C2     |----| C3     |      every tile:
   +--------+    +--------+    +--------+    +--------+        core (uBrain or crossbar)
       |             |             |             |             + mesh router
   +--------+    +--------+    +--------+    +--------+        + routing table
   | C4     |----| C5     |----| C6     |----| C7     |        + input spike buffer
   +--------+    +--------+    +--------+    +--------+
       |             |             |             |
      ...           ...           ...           ...   (C8..C15)
```

| module | role |
|---|---|
| `astro_manycore` | top: `MESH_X` x `MESH_Y` tiles (4 x 4), host interface |
| `core_tile` | one core + router + routing table + input buffer |
| `ubrain_core` | 256 input, 64 hidden, 16 output neurons; three astrocyte layers |
| `crossbar_core` | 128 input, 128 output neurons, 128 x 128 crossbar; two astrocyte layers |
| `astro_layer` | the astrocytes of one layer (the layer's neurons shared equally among `NA`) |
| `astrocyte` | one astrocyte with its synaptic sites |
| `synapse_array` | 2-bit weight memory and accumulation for one set of connections |
| `neuron_array` | one layer of leaky integrate-and-fire neurons |
| `mesh_router` | five-port router of the 2-D mesh |
| `lfsr16` | random source of the stochastic synaptic release |
| `astro_pkg` | shared types, number formats, packet and configuration formats |

`KIND = 0` (the default) builds uBrain cores, and `KIND = 1` builds crossbar cores.
With uBrain cores, the default chip has 16 x 336 = 5,376 neurons and 16 x 17,408 =
278,528 synapses (557,056 bits of weight memory).

## The astrocyte

The astrocyte is the part of this design that is hardest to follow, and the part that
does the fault tolerance. A module encloses `G` neurons. Once per network timestep it
takes their spikes and returns one gated spike per synaptic site.

### State and equations

Per enclosed neuron `j`, one state variable, updated in neuron order:

| quantity | update (forward Euler, one timestep) | origin |
|---|---|---|
| 2-AG `AG_j` | `AG_j += -AG_j/tau_AG + r_AG * spike_j` | publication |
| direct signal `DSE_j` | `DSE_j = -K_AG * AG_j` | publication |
| release probability `PR_j` | `PR_j = PR0 + PR0 * (DSE_j + eSP) / 100` | publication |

Shared by the whole astrocyte, updated once at the end of the timestep from the old
values:

| quantity | update | origin |
|---|---|---|
| cytosolic Ca `Ca_cyt` | `+= mean(AG)/4 - Ca_cyt/8 - SERCA + CICR` | this design |
| IP3 | `+= -IP3/8 + Ca_cyt/4` (PLC path) | this design |
| ER calcium `Ca_ER` | `+= SERCA - CICR`, with `SERCA = Ca_cyt/8` and `CICR = IP3*Ca_ER/2^16` | this design |
| glutamate `Glu` | `+= -Glu/tau_Glu + r_Glu * [Ca_cyt >= CA_TH]` | equation published, trigger chosen here |
| e-SP | `+= (m_eSP * Glu - eSP) / tau_eSP` | publication |

The publication describes the calcium pathways only in words. Cytosolic calcium
is pumped into the ER (SERCA) and drives IP3 production (PLC), and IP3 releases ER
calcium back into the cytosol (CICR). Linear compartments that follow those words are
used here. The glutamate equation's source term is tied to the moment calcium crosses a
release threshold. Here it is read as "produce at rate `r_Glu` while cytosolic calcium
is above the threshold". The threshold is applied to cytosolic rather than ER calcium
because, in this linear model, the ER level at steady state does not depend on
activity.

### Synaptic site: the circle-plus node

Each neuron's output is combined with its astrocyte's output before it reaches the next
set of synapses. The rule used here (this design's choice) is:

* neuron `j` spiked: the spike is passed on with probability `PR_j`;
* neuron `j` silent: the site still releases with probability `max(PR_j - PR0, 0)`.

How this repairs a fault, using the default constants and a healthy firing probability
`p` per timestep:

* 2-AG settles at `AG = 16 p` (unit 1.0, `tau_AG` = 16 steps, `r_AG` = 1.0), so
  `DSE = -6.25 * 16 p % = -100 p %`.
* When the group is active enough to keep `Ca_cyt` above threshold, glutamate settles
  at 16 units, and e-SP at `m_eSP * 16 = 25 %`.
* A healthy neuron's `PR_j = PR0 (1 + (25 - 100 p)/100)`: its own 2-AG cancels much
  of the e-SP boost.
* A failed neuron's 2-AG decays away (time constant 16 steps), `DSE_j -> 0` and
  `PR_j -> 1.25 PR0`. Its site then releases with probability `0.25 PR0 = 0.125` per
  step. That rate is set by the other neurons of the group, which keep the astrocyte's
  calcium up.

With `p = 0.25`, the healthy site passes about 0.125 spikes per step and the repaired
site releases about 0.125. The astrocyte testbench silences one of eight neurons and
measures 36 releases in 300 steps (0.12). If several neurons of one astrocyte fail
together, the astrocyte's calcium drops and repair weakens. The authors report the
same effect for high error rates.

### Number formats and constants

| item | format / value |
|---|---|
| AG, Ca, IP3, Glu | unsigned Q8.8, saturating |
| DSE, e-SP | signed Q8.8 **percent** |
| PR | unsigned Q0.16 |
| `/100` | multiply by 655, shift right 16 (0.05 % error) |
| time constants | powers of two (divisions are shifts): tau_AG 16, tau_Glu 16, tau_eSP 8, Ca/IP3 leak 8 |
| `K_AG`, `PR0`, `r_AG`, `r_Glu`, `m_eSP`, `CA_TH` | 6.25 %/unit, 0.5, 1.0, 1.0, 1.5625 %/unit, 2.0 |
| random source | one 16-bit Galois LFSR per astrocyte (x^16+x^14+x^13+x^11+1) |

All constants are parameters of `astrocyte`. The publication gives none of them.

### Timing

The enclosed neurons are handled one per clock. Each cycle updates one neuron's 2-AG
register and works out its PR through a chain of constant multiplications. The shared
state then takes one more cycle. `done` pulses `G + 1` rising edges after
the edge that samples `step`. An astrocyte over a 256-neuron layer therefore takes
257 cycles.

## Cores

### uBrain core

```
in -> i (256) -> astrocytes -> [256 x 64 synapses] -> h (64 LIF) -> astrocytes
   -> [64 x 16 synapses] -> o (16 LIF) -> astrocytes -> out
```

### Crossbar core

```
in -> i (128) -> astrocytes -> [128 x 128 crossbar] -> o (128 LIF) -> astrocytes -> out
```

The publication gives these structures: astrocytes around every layer, with the
astrocytes' gated sites, not the raw spikes, driving the next connections. Input
neurons pass on the spikes addressed to them. Hidden and output neurons are leaky
integrate-and-fire neurons (this design's choice; the publication names no neuron
model): `V <= V - V/4 + I`, spike and reset to 0 at `V >= 8`, clamp at 0.

Each set of connections is a `synapse_array`. It holds one memory row per
pre-synaptic neuron, with 2-bit two's complement weights (-2..1) packed two bits per
column. On each timestep it reads the rows one per clock and adds the row of every
spiking neuron into the accumulators. A small sequencer runs the stages one after the
other, with these latencies (`step` edge to `done`):

* uBrain: `N/NA1 + N + M/NA2 + M + P/NA3 + 19`, which is 675 cycles (6.75 us at the
  100 MHz of the FPGA prototype);
* crossbar: `N/NA1 + N + N/NA2 + 11`, which is 395 cycles.

`NA1..NA3` set how many astrocytes enclose each layer. The mapping software adds
astrocytes to a layer until the layer meets its accuracy target, and shares the
layer's neurons equally among them. This changes both the area and the latency
above. The default of one per layer matches the published drawings.

## Spike transport

Execution is in timesteps. Spikes produced in timestep `t` are inputs of timestep
`t + 1`.

1. The host raises `step` for one cycle while `busy` is low.
2. Every tile hands `in_buf | ext_spikes` to its core and clears `in_buf`.
3. When the core finishes, the tile scans its output neurons, one per clock. For each
   spike whose routing-table entry is enabled, it injects a packet
   `{dx, dy, idx}` (destination column, row and input neuron) into its router.
4. Routers forward packets by dimension order (x first, then y). Each has 2-entry input
   FIFOs, registered outputs, round-robin arbitration and a valid/ready handshake on
   every link. A packet that reaches its destination sets bit `idx` of that tile's
   `in_buf`.
5. `busy` falls when every core is done and every router is empty.

The publication shows the cores on a mesh but does not describe the network. The
packet format, the routing and the timestep protocol are this design's.

### Host interface

| port | use |
|---|---|
| `cfg_we`, `cfg_tile` (`y*MESH_X + x`) | write one word into one tile |
| `cfg_target = CFG_W1`, `cfg_addr = r` | weight row `r` of the first synapse array (column `c` in bits `2c+1:2c`) |
| `cfg_target = CFG_W2`, `cfg_addr = r` | weight row `r` of the uBrain hidden-to-output array (low `2P` bits) |
| `cfg_target = CFG_ROUTE`, `cfg_addr = j` | routing entry of output neuron `j`: `cfg_data[12:0] = {en, dx[1:0], dy[1:0], idx[7:0]}` |
| `ext_spikes[t]` | spikes added to tile `t`'s input at the next `step` |
| `fault_in/mid/out[t]` | silence individual input, hidden or output neurons (fault injection) |
| `out_spikes[t]` | tile `t`'s output spikes from its last timestep |

A silenced neuron keeps integrating but never emits a spike. This models the neuron
that "fails to fire", the case the astrocyte is meant to repair.

## Where this departs from the publication

* Astrocyte constants, number formats, the calcium-pathway equations, the
  glutamate-trigger reading and the synaptic-site rule are this design's own
  (see above).
* The published drawing of the astrocyte links glutamate to ER calcium. Here glutamate
  is triggered by cytosolic calcium, for the reason given under "State and equations".
  The ER still takes part: SERCA and CICR move calcium between it and the cytosol.
* The glutamate source `r_Glu(t - t_Ca)` is read as a production rate that holds
  while calcium is above threshold, not as a single pulse when it crosses.
* The neuron model (LIF, threshold 8, leak V/4) is assumed.
* The prototype's astrocyte used 4 DSP blocks. This one has a single general
  multiplier (IP3 x ER calcium, for CICR). Every other product is by a constant
  (K_AG, PR0, 1/100, m_eSP), and the per-neuron ones are shared over the enclosed
  neurons.
* The interconnect, routing tables, timestep protocol and host interface are
  invented, because the publication only draws the mesh.
* 16 cores follow the published 4 x 4 drawing. The publication does not fix a core
  count.
* The FPGA clock manager and I/O of the prototype are vendor parts, and are not
  modelled. The top takes a clock and exposes plain ports.
* Fault injection is by silencing neurons. The authors inject random parameter errors
  in software, which this RTL does not do. A corrupted weight can be imitated by
  rewriting a row.

## Capacity against the evaluated networks

The authors evaluate LeNet, AlexNet, VGGNet, ResNet, DenseNet, MobileNet and Xception,
without giving their sizes. By the standard sizes of these networks, none fits in one
configuration of the default chip, which has 5,376 neurons and 278,528 synapses. LeNet-5
alone needs about 8,100 neurons and about 416,000 synapses once its convolutions are
unrolled. Running such a network needs more tiles (`MESH_X`, `MESH_Y`, up to 4 x 4 with
the 2-bit packet coordinates in `astro_pkg`) or time-multiplexed reconfiguration, which
is not part of this design.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`. The models in `tb/astro_ref_pkg.sv` use plain integer
arithmetic to repeat the astrocyte (including its LFSR), the LIF layer and the weight
sums. The core, tile and chip testbenches compare every output spike with these models.

| testbench | size | what it shows |
|---|---|---|
| `tb_astrocyte` | G = 8 | all sites and shared state vs. model for 500 steps; latency G+1; repair releases after a neuron is silenced |
| `tb_synapse_array` | 16 x 12 | accumulators vs. weight sums, extreme negative sum, latency N_IN+1 |
| `tb_neuron_array` | 8 | membrane and spikes vs. model, silenced neuron |
| `tb_ubrain_core` | 16-8-4, 2 input astrocytes | outputs vs. model, latency formula, faults |
| `tb_crossbar_core` | 16 x 16, 2 output astrocytes | outputs vs. model, latency formula, repair of a silenced output neuron |
| `tb_mesh_router` | one router | 300 packets on five ports under random back-pressure: route, order, loss, duplication |
| `tb_core_tile` | 16-8-4 | routing to itself, to the east neighbour, from the north; next-step input vector |
| `tb_astro_manycore` | **full default size** (4 x 4 uBrain tiles) | 64 timesteps of all 16 cores vs. model; requires spikes crossing the mesh, local routes, release failures, repair releases and stalled links |
| `tb_astro_manycore_xbar` | full size with crossbar cores (4 x 4 tiles of 128 x 128) | the same for the crossbar chip |

The small-core testbenches lower the firing threshold to 4 so that their small
networks stay active. To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_astro_manycore \
    rtl/astro_pkg.sv tb/astro_ref_pkg.sv rtl/lfsr16.sv rtl/astrocyte.sv rtl/astro_layer.sv \
    rtl/synapse_array.sv rtl/neuron_array.sv rtl/ubrain_core.sv rtl/crossbar_core.sv \
    rtl/mesh_router.sv rtl/core_tile.sv rtl/astro_manycore.sv tb/tb_astro_manycore.sv
./obj_dir/Vtb_astro_manycore
```

The full-size chip testbench builds in about a minute and a half and simulates in under
a second. Testbenches read no files; all stimulus is generated with `$urandom`.
Uninitialised state is random in a two-state simulator, so every register that is read
is reset.

The only lint warnings are about unused signals and open observation outputs, plus
one about `rst_n` being used both as an asynchronous reset and inside the router's
handshake assertion (`disable iff`).
