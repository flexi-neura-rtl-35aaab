# Flexi-NeurA in SystemVerilog

Flexi-NeurA is a small neuromorphic accelerator for spiking neural networks
(SNNs) on edge devices. Each layer of the network gets its own processing
core. A core has one neuron datapath that it reuses for every neuron of the
layer, one after another (time multiplexing). It only works when a spike
arrives (event-driven). Cores talk to each other only through short
address-event packets.

Almost everything about a core can be chosen when it is built:
- layer sizes;
- bit widths of weights, membrane potential and synaptic current;
- which topologies and neuron models are built in.

Registers written over SPI then choose, at run time, among what was built.
The main configuration, and the default of this RTL, is a 256-128-10 fully
connected network of leaky integrate-and-fire (LIF) neurons for MNIST. It uses
two cores, 6-bit weights and 8-bit membrane potentials.

This repository holds synthesizable RTL of the core and of a multi-core
system, plus self-checking testbenches. The rest of this text explains:
- how the design works;
- which parts follow the published description and which are this
  implementation's own choices;
- how to simulate it.

## 1. The network as a packet pipeline

The input layer is not hardware. A host (the "driver") produces the input
spikes. It also programs every core over SPI and collects the output spikes.
Core *i* holds layer *i+1*. The cores form a chain: core *i*'s AER output link
is wired to core *i+1*'s AER input link (`flexi_neura_system`).

All traffic is 9-bit packets. Bit 8 is a control bit:

| packet | code | meaning |
|---|---|---|
| ASPL | `{0, addr[7:0]}` | neuron `addr` of the previous layer fired |
| EOTS | `9'h100` | end of time step: every spike of this step has been sent |
| EOIN | `9'h101` | end of input: this was the last step of the sample |
| ASCL | `addr[7:0]` (8 bit, internal) | a neuron of this layer fired; it is fed back in the next step (recurrent layers) |

The numeric codes of EOTS and EOIN are this implementation's choice. Eight
address bits limit a layer to 256 neurons.

For each time step the host sends the ASPLs of the active inputs, then EOTS.
The last step ends with EOIN instead. Each core does three things:
1. It integrates the ASPLs as they arrive.
2. On EOTS or EOIN, it does the recurrent integration and then the
   leak/fire sweep.
3. It sends its own ASPLs onward, followed by the same control packet.

Time steps therefore flow through the chain as a pipeline. Core 2 integrates
step *t* while core 1 already works on step *t+1*.

### Link protocol

A link has `req`, `data[8:0]` and `ack`, and uses a four-phase handshake:
1. The sender puts `data` on the link and raises `req`.
2. The receiver raises `ack` once the packet is in its input queue.
3. The sender drops `req`.
4. The receiver drops `ack`.

`data` must be stable while `req` is high; an assertion checks this. A
receiver whose queue is full simply does not acknowledge, and that is the whole
back-pressure mechanism. A core that wants to send waits until the next core
has taken the packet, so nothing is ever dropped.

## 2. Inside a core

`flexi_neura_core` contains four units:

```
            SPI ──► spi_slave ──(config regs: cfg_t)──────────────┐
                       │ byte read/write requests                  │
                       ▼                                           ▼
 AER in ──► amu ──► controller ──(rd/wb, op, src, dst)──► cnu (synaptic memories,
 AER out ◄─ (aer_in, scheduler,    ▲                        neuron state memory,
            aer_out)               └──── spike ────────────  neuron_core)
```

* **AMU** (`amu` = `aer_in` + `scheduler` + `aer_out`). Handles the two links
  and the queues.
  - The feedforward queue (`FF_DEPTH` = 16 entries) holds incoming packets in
    arrival order.
  - The recurrent queue holds the ASCLs of the current step. It is built only
    when `RECURRENT` = 1. Its depth is N, so it cannot overflow: a neuron fires
    at most once per step.
* **Controller** (`controller`). One state machine that sequences everything.
  See section 3.
* **CNU** (`cnu`). The configurable neuron unit. It holds:
  - the feedforward synaptic memory;
  - the recurrent synaptic memory, built only for ATA-T, see below;
  - the neuron state memory;
  - the combinational `neuron_core`.
  It also serves the SPI byte accesses to those three memories.
* **SPI slave** (`spi_slave` + `config_regs`). Decodes 46-cycle frames into
  configuration-register writes and byte accesses. See section 5.

### Topologies

Three topologies are supported:
- **FF**: feedforward only.
- **ATA-T** ("all-to-all true"): a full recurrent weight matrix inside the
  layer.
- **ATA-F** ("all-to-all false"): each neuron feeds back only to itself, with
  one shared self-weight held in a register.

The parameters set what is built:
- `RECURRENT` builds the ASCL queue.
- `RECURRENT && ATA_T` builds the recurrent memory.
- `SYNAPTIC` builds the synaptic-current path.

IF and LIF share one datapath: IF is LIF with the leak switched off.

## 3. The controller: one time step, cycle by cycle

The states, with their numbers in `controller.sv`:

| state | what happens |
|---|---|
| `WAIT` (0) | Idle. An SPI request has priority over packet work. A packet at the head of the feedforward queue starts FF_INTEG (ASPL), REC_INTEG_T/F (EOTS/EOIN in a recurrent layer with ASCLs waiting) or LEAK_SPK. This needs the activity-enable register set. |
| `W_NEUR`, `R_NEUR`, `FF_W_SYN`, `FF_R_SYN`, `REC_W_SYN`, `REC_R_SYN` (1–6) | One-cycle byte access to the memory chosen by the SPI command. |
| `WAIT_SPIDN` (7) | Returns read data to the SPI slave; waits until the request is withdrawn. |
| `FF_INTEG` (8) | For the ASPL's source *s*: for every neuron *j* < NeuronNumber, add `w_ff[s][j]`. |
| `POP` (9) | Remove the ASPL from the queue. |
| `REC_INTEG_T` (10) | For every queued ASCL *s*: for every neuron *j*, add `w_rec[s][j]`. |
| `REC_INTEG_F` (11) | For every queued ASCL *s*: add the ATA-F self-weight to neuron *s* only. |
| `LEAK_SPK` (12) | For every neuron: threshold, reset or leak. A spike pauses the sweep. |
| `WAIT_TRANS` (13) | Wait until AER-OUT has delivered the spike's ASPL (or, at the end, the EOTS/EOIN). Then resume the sweep or return to `WAIT`. |

Every neuron visit takes two cycles. In the first, the state memory and the
synaptic memory are read. In the second, the neuron core's result is written
back. That gives these costs:

* one ASPL: 2·NeuronNumber + 2 cycles from one queue pop to the next;
* one ASCL in ATA-T: 2·NeuronNumber cycles; in ATA-F: 2 cycles;
* the leak/fire sweep: 2·NeuronNumber cycles, plus one link transfer per
  spike, plus the final control packet.

The NeuronNumber register can shrink the sweep below the built size N.

Recurrent spikes produced in step *t* wait in the ASCL queue. They are
integrated when the EOTS/EOIN of step *t+1* arrives, after that step's
feedforward spikes and before its leak sweep. So a neuron's own output affects
the layer one step later, as the model equations require.

**End of a sample and lazy reset.** The last step of a sample is either:
- the step ended by an EOIN; or
- if the TIME STEP register is non-zero, the TIME STEP-th step since the
  previous sample ended, even when the host sent only EOTS.

In the last step, the sweep still decides and sends the spikes. But it writes
zero into every neuron's state instead of the new value, and queues no ASCLs.
The core then sends EOIN. The next sample therefore starts from a clean layer
without a separate clearing pass.

## 4. Neuron arithmetic

`neuron_core` is combinational. Integration adds the signed weight to:
- Vm, for IF/LIF;
- Isyn, for the synaptic model.

In the leak/fire operation:

```
u = Vm                 (IF/LIF)        u = Vm + Isyn     (synaptic)
if u >= threshold:  spike;  Vm = 0  or  Vm = u - threshold   (reset mechanism register)
else:               Vm = beta · u
synaptic model:     Isyn = alpha · Isyn      (every step, spike or not)
last step:          Vm = Isyn = 0
```

Every sum saturates at the signed range of its width. The threshold is a
16-bit signed register value in membrane units. The host is expected to scale
it to the chosen precision.

**Coefficient generator** (`coeff_gen`). The decay has no multiplier. A 9-bit
DecayRate selects terms to add:
- bit 8 passes the input through unchanged (the bypass, factor 1);
- bits 7…0 add `|x|>>1` … `|x|>>8`.

Any factor k/256 with k in 0..255 is reachable, plus the factor 1. The shifts
are grouped in pairs (1,2), (3,4), (5,6), (7,8), one pair per "selection
unit". The 4-bit parameter `SEL_UNITS` removes pairs that are not needed.

The arithmetic is done on the magnitude and the sign is put back afterwards,
so positive and negative values decay the same way. The sum is clamped.

Example: DecayRate `9'b0_1001_1001` = 1/2 + 1/16 + 1/32 + 1/256 = 0.598.

IF is DecayRate = `9'h100`. This is also the reset value of both rate
registers, so an unprogrammed core does not leak.

## 5. Memories and the SPI map

**Synaptic memory** (`syn_mem`). For a layer with S source neurons and D
destination neurons:
- there are pow2(S) blocks, one per source;
- each block has pow2(⌈D/8⌉) rows;
- each row holds 8 weights of W bits, which is W bytes.

Weight (s, d) is in row `s·pow2(⌈D/8⌉) + d/8` at bits `[(d%8)·W +: W]`. SPI
byte *b* of a row is bits `[8b +: 8]`.

Example: 256 inputs × 128 neurons × 6 bits gives 256 × 16 rows × 48 bits =
196,608 bits.

**Neuron state memory** (`neuron_mem`). One row per neuron, pow2(N) rows.
Vm is in the low V_W bits and Isyn (synaptic builds only) directly above it.
The row is padded up to whole bytes.

**SPI frame** (`spi_slave`). A frame is 46 SCK cycles with `cs_n` low: a
23-bit command, then a 23-bit data field. It uses mode 0, MSB first.

| command bits | meaning |
|---|---|
| [22] | 1 = memory access, 0 = configuration-register write |
| [21] | memory: 1 = write, 0 = read |
| [20:19] | 00 neuron state, 01 feedforward synapses, 10 recurrent synapses |
| [18:0] | register index, or the address: neuron memory `[7:0]` row / `[18:8]` byte; synaptic memories `[12:0]` row / `[18:13]` byte |

A write carries its byte in data bits [7:0]. A read returns the byte in the
last 8 bits of the frame, cycles 38–45. The selected core drives MISO only
then (`miso_oe`).

SCK, CS_N and MOSI are sampled by the core clock through synchronisers, so the
core clock must be at least 4× SCK. The testbenches use 6×.

**Configuration registers** (`config_regs`, `flexi_pkg::cfg_reg_e`). All are
write-only.

| idx | register | width | reset |
|---|---|---|---|
| 0 | core number (every core accepts it) | 8 | 0 |
| 1 | activity enable | 1 | 0 |
| 2 | neuron number | 9 | N |
| 3 | feedforward (0) / recurrent (1) | 1 | `RECURRENT` |
| 4 | neuron model: LIF/IF (0) / synaptic (1) | 1 | `SYNAPTIC` |
| 5 | time steps per sample (0 = only EOIN ends a sample) | 16 | 0 |
| 6 | all-to-all: ATA-F (0) / ATA-T (1) | 1 | `RECURRENT && ATA_T` |
| 7 | ATA-F self-weight (signed) | 16 | 0 |
| 8 | threshold (signed) | 16 | 0 |
| 9 | reset mechanism: to zero (0) / subtract (1) | 1 | 0 |
| 10 | beta DecayRate | 9 | `9'h100` |
| 11 | alpha DecayRate | 9 | `9'h100` |

A core with `CORE_ID` equal to the core-number register is "selected". Only a
selected core accepts the other registers and memory accesses. To talk to
core *k*, the host first writes *k* to register 0; all cores share that one
write. In `flexi_neura_system`, core *i* has the ID *i+1*.

Typical bring-up of a core:
1. Select the core.
2. Write the registers. Set activity enable last.
3. Write the weights, byte by byte. Only rows of sources that will ever spike
   matter.
4. Write zeros into the neuron states. The memories are not reset.

## 6. Design-time parameters

`flexi_neura_system` takes per-core arrays (index = core):

| parameter | default | meaning |
|---|---|---|
| `NUM_CORES` | 2 | cores in the chain |
| `LAYERS[NUM_CORES+1]` | `'{256,128,10}` | input size, then the size of each core's layer (1..256) |
| `W_FF`, `W_REC` | 6, 6 | feedforward / recurrent weight bits |
| `V_W`, `I_W` | 8, 8 | membrane potential / synaptic current bits |
| `RECURRENT`, `ATA_T`, `SYNAPTIC` | all 0 | what each core builds (bit *i* = core *i*) |
| `FF_DEPTH` | 16 | input queue depth |

`flexi_neura_core` also has `SEL_BETA` and `SEL_ALPHA`. These are the
selection units kept in the two coefficient generators.

## 7. Performance of the default build

The full-size testbench runs one 10-step sample: 189 input spikes, 312 hidden
spikes, 48 output spikes. From the host's first packet to the output EOIN it
takes 53,189 cycles, which is 0.89 ms at 60 MHz. Core 1's own work alone is
189 × 258 + 10 × 256 = 51,322 cycles. The second core runs almost entirely in
parallel.

The published figure for one MNIST image at 60 MHz is 1.1 ms, which is the
same order. Latency grows with the number of input spikes times the layer
size, and not with anything else.

After synthesis with yosys, the two-core default build has:
- 210,336 memory bits: mostly core 1's weight memory;
- 589 flip-flop bits;
- under a thousand word-level cells.

Logic does not grow with layer width; only the memories do.

## 8. Where this RTL departs from, or adds to, the published description

* **Synaptic-model order.** The model equations decay Isyn and then add the
  step's input. They apply beta to the previous U. Here, inputs are added to
  Isyn as they arrive. At the end-of-step sweep, u = Vm + Isyn is tested and
  reset or decayed, and Isyn is decayed afterwards. The same dynamics result,
  with the decay placed at the end of the step rather than the start.
* **Threshold test.** It is `u >= threshold`, following the description of
  the leak/fire state ("reaches or exceeds"). Elsewhere the text says
  "exceeds".
* **Wait-Trans.** The published text says the controller holds a packet
  "until the feedforward queue of the next layer is full". That does not fit
  lossless transfer, so here it waits until the next layer has accepted the
  packet.
* **Timing not stated in the description.** Two-cycle neuron visits and the
  2·N+2-cycle cost per ASPL are this design's. The description mentions a
  "100-cycle controller loop" without defining it; it is not reproduced.
* **MISO timing.** The description says read data starts "around cycle 36".
  Here the byte occupies the frame's last 8 cycles, 38–45.
* **Packets and registers.** Packet codes, the link handshake, register
  indices, widths, reset values and the core-selection rule are this design's
  own. Only the register names and their count come from the published
  design.
* **Time step register.** It ends a sample after a fixed number of steps
  even without EOIN. It is an addition in how it is used; the published
  design lists the register but not its effect.
* **Arithmetic.** Saturating arithmetic and the 16-bit threshold and self-weight
  registers are this design's choice.
* **Queue depths.** The feedforward queue depth (16) and the recurrent queue
  depth (N) are this design's choice.
* **Time steps in the comparison table.** The comparison table lists 100 time
  steps for MNIST; the accuracy table lists 10. The testbench uses 10.

Not implemented:
- the host driver, which is software;
- the design-space exploration tool that chooses bit widths before synthesis.

Their interfaces are the system's SPI and AER ports.

## 9. Which published workloads fit the default build

| workload | sizes | fits the default build? |
|---|---|---|
| MNIST, IF or LIF, feedforward | 256-128-10, 10 steps | yes: exactly the default |
| MNIST, recurrent (ATA-F/ATA-T) or synaptic | 256-128-10 | rebuild with `RECURRENT`/`ATA_T`/`SYNAPTIC` set |
| SHD speech digits, all 9 variants | 233-128-20, 70 steps | rebuild with `LAYERS='{233,128,20}` (20 outputs > 10) |
| DVS gestures, all 9 variants | 256-128-11, 80 steps | rebuild with `LAYERS='{256,128,11}` |

Every one of these fits a rebuilt system: no layer is wider than 256.
`tb_flexi_neura_workloads` simulates all three networks at their published
sizes and step counts, rebuilt with every optional part. It runs all nine
variants of each on one sample and checks every output packet. The input is
sparse random spikes (40 active channels) and the weights are random, because
the data sets and trained weights are not part of this design. Latency of one
sample, in cycles (at 60 MHz):

| variant | SHD, 70 steps | DVS, 80 steps | MNIST, 10 steps |
|---|---|---|---|
| IF, FF | 354,260 (5.9 ms) | 322,292 (5.4 ms) | 61,434 (1.02 ms) |
| LIF, ATA-F | 464,535 (7.7 ms) | 405,555 (6.8 ms) | 69,257 (1.15 ms) |
| Synaptic, ATA-T | 717,586 (12.0 ms) | 740,111 (12.3 ms) | 136,800 (2.28 ms) |

These latencies depend on how many spikes the random input and weights
produce, so they are not a measure of the published accuracy runs. ATA-T costs
most, because each hidden spike sweeps the whole hidden layer again. With
these weights the small output layer fires on nearly every neuron and step in
the FF and ATA-F variants.

## 10. Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. Reference results come from
`tb/tb_ref_pkg.sv`, an independent integer model of one layer's time step.
The shared host model `tb/tb_spi_host.sv` drives SPI frames and loads weight
matrices.

| testbench | what it covers |
|---|---|
| `tb_coeff_gen`, `tb_neuron_core` | exhaustive and random arithmetic against the reference, with all and with only some selection units built |
| `tb_syn_mem`, `tb_neuron_mem`, `tb_cnu` | address maps, byte access, weight select, two-cycle access |
| `tb_spi_slave`, `tb_config_regs` | frames, core selection, MISO read-back |
| `tb_aer_in`, `tb_aer_out`, `tb_scheduler`, `tb_amu` | handshake, ordering, back-pressure, queue full/empty |
| `tb_controller` | all 14 states, the 2N-cycle ASPL sweep, ATA-T/ATA-F/synaptic samples |
| `tb_flexi_neura_core` | one core through its pins only: three run-time configurations, state read-back, ASPL cost 2N+2 |
| `tb_flexi_neura_system` | a 12-10-5 two-core chain; run-time switches between ATA-T/ATA-F/FF and IF/LIF/synaptic; counts every mechanism (stall, back-pressure, lazy reset, both resets, EOIN/time-step ends, core selection) and fails if one never occurred |
| `tb_flexi_neura_full` | the default 256-128-10 system, one 10-step sample, with the latency checked against the cycle model |
| `tb_flexi_neura_workloads` (with `tb_workload_net`) | SHD, DVS and MNIST sizes, all nine variants each, about 12 million cycles, about a minute |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Mdir obj tb/tb_ref_pkg.sv rtl/flexi_pkg.sv rtl/*.sv \
          tb/tb_spi_host.sv tb/tb_workload_net.sv tb/tb_flexi_neura_system.sv --top-module tb_flexi_neura_system
./obj/Vtb_flexi_neura_system
```

The full-size test simulates about 1.2 million cycles in about a second. Most
of that time is SPI programming.

### Limits

- Memories are plain arrays with synchronous read, which FPGA block RAM can
  absorb. They are not tied to any vendor macro.
- Assertions in the RTL check FIFO overflow and underflow, link stability and
  that the controller never uses a memory's two ports in the same cycle. They
  use `disable iff (!rst_n)` on an asynchronous reset, which lint reports as a
  reset used in a non-reset context. That is expected.
