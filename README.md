# An event-driven spiking-network core with HBM synapse tables

This is synthesizable SystemVerilog for one core of a large spiking neural
network (SNN) accelerator built from FPGAs with high-bandwidth memory (HBM).
The split is simple:

- **Neuron state on chip.** Membrane potentials and input-axon events sit in
  on-chip SRAM. Every neuron is touched in every time step, so this state
  must be fast and dense.
- **Connectivity in HBM.** The synapses live in HBM as adjacency lists, one
  list per spike source. A list is read only when its source spikes, so the
  HBM traffic, and most of the energy, grows with the number of spikes, not
  with the number of synapses.

One core at its default size holds 131,072 neurons and 131,072 input axons.
Its HBM address space holds 2^23 rows of 256 bits. The neuron models are
leaky integrate-and-fire (LIF) and binary "ANN" neurons, both with optional
noise.

## The time step

A host command starts a step, and the core answers when the step is done.
A step has three parts:

1. **Sweep.** Every neuron is updated, 32 per clock: 16 lanes, each with two
   neurons per URAM row. The update order is:
   1. add noise;
   2. spike if `V > θ`;
   3. reset to 0 on a spike;
   4. LIF neurons leak, `V ← V − (V >>> λ)`; ANN neurons clear, `V ← 0`.

   Every URAM row with at least one spike is queued as
   `{row, 32-bit spike mask}`.
2. **Pointer phase.** The input axons set for this step come first. They
   are read from the axon event memory, which is cleared as it is read.
   Then come the queued spiking rows. Both become pointer-row requests:
   `{HBM row, mask of 8 slots}`. Each request is one 256-bit HBM read,
   because the pointers of 8 consecutive neurons or axons share a row. The
   pointers chosen by the mask go into the pointer queue.
3. **Synapse phase.** For each queued pointer, the core reads its region of
   synapse rows from HBM, up to 4 reads in flight. A row carries 8 synapse
   slots, and all 8 reach their lanes in the same clock, where each weight
   is added to its target membrane. A slot holding an output marker makes
   the core report the source neuron's spike to the host.

The two routing phases alternate. The pointer phase stops when fewer than 8
free entries are left in the 512-entry pointer queue. The synapse phase then
empties the queue, and the pointer phase resumes. This way a step with any
number of spikes completes with a bounded queue.

The weights added in this step's synapse phase are seen by the next step's
sweep. Those weights come from this step's input axons and this step's
spikes. The step ends with a `STEP_DONE` response carrying two counts: the
clock cycles the step took and the HBM rows read. Energy and latency per
inference are normally estimated from these two counts.

### Cost of a step

| Part | Clocks |
|---|---|
| Sweep | `neuron_rows` plus a few. At full size that is 4,096 clocks for 131,072 neurons. |
| Axon scan | A few clocks per axon-memory row in use. |
| Pointer phase | One HBM read per spiking row and per active axon row. Pointers are pushed at one per clock. |
| Synapse phase | About one clock per synapse row while HBM keeps up. Pointer rows with no synapses cost one clock. |

## HBM layout: pointers, segments and alignment

HBM is used in 256-bit rows of eight 32-bit slots. Two consecutive rows (an
even row and the odd row after it) form a **segment** of 16 slots, and slot
`i` of a segment belongs to lane `i`. Lanes 0–7 are in the even row and
lanes 8–15 in the odd row. Neuron `n` lives in lane `n % 16`.

The central rule is alignment: **a synapse must sit in the slot of its
postsynaptic neuron's lane**. A synapse row can then be applied to all
lanes in one clock with no crossbar. The price falls on the compiler: a
source with many targets in one lane needs several segments, and the other
lanes' slots in those segments stay empty.

HBM holds four regions. Their base rows are configuration registers, and
the synapse region is whatever the host places above them.

| Region | Contents |
|---|---|
| Axon pointers | Axon `a` is at row `AXPTR_BASE + a/8`, slot `a % 8`. |
| Neuron pointers | Neuron `n` is at row `NPTR_BASE + n/8`, slot `n % 8`. |
| Synapses | Segments of two rows each. |
| Models | 16 rows, one model per row. `LOAD_MODELS` copies them into the core's model registers. |

Word formats (`rtl/hs_pkg.sv`):

| Word | Bits |
|---|---|
| Pointer | `{rows[8:0], start[22:0]}`: a region of `rows` HBM rows from `start`. `rows = 0` means no synapses. |
| Synapse | `{kind[1:0], 0, k[12:0], weight[15:0]}`. `kind` 01 is a weight to neuron `16*k + lane` (`k` is the neuron's index inside its lane). `kind` 00 is an empty slot. |
| Output marker | `kind` 10, with the source neuron's number in bits [16:0]. The core reports that number to the host whenever the region is read, which happens exactly when the neuron spiked. |

A 9-bit row count allows up to 255 segments per source, which is 255
targets in one lane. The benchmark networks need at most 125.

## On-chip state

- **Membranes.** Each lane has one 4K × 72-bit URAM bank
  (`membrane_bank`). A row holds two neurons, each as `{spike, V[34:0]}`.
  Neuron `n` is in row `n >> 5`, half `(n >> 4) & 1`.

  A lane (`neuron_lane`) runs every operation as a two-stage
  read-modify-write. The operations are sweep row, add weight, write neuron
  and read neuron. An operation on the same row as the one before it gets
  the new value by forwarding, so weights for the same neuron may arrive on
  consecutive clocks. The stored spike bit is the neuron's last sweep
  result, kept for read-back.
- **Axon events.** One 8K × 16-bit BRAM (`axon_event_mem`) holds one bit per
  axon. The host sets a bit with `SET_AXON` before a step. Setting a bit is
  a read-modify-write with forwarding. The step reads each row in use and
  clears it in the same access.
- **Noise.** Each of the 32 update units has a 32-bit xorshift generator
  (`noise_gen`). A draw takes the low 17 bits and forces the LSB to 1,
  giving an odd, balanced value in (−2^16, 2^16). The draw is shifted left
  by ν for ν > 0 and arithmetically right by −ν for ν < 0; ν ≤ −17 gives
  exactly zero.
- **Models.** There are 16 models, each `{is_lif, θ, ν, λ, end_neuron}`.
  Neurons are numbered so that each model covers a contiguous range: a
  neuron uses the first model whose `end_neuron` is above its number.

## Host interface

The core has a valid/ready command stream and a valid/ready response stream
(`host_cmd_t`, `host_rsp_t`), where a PCIe endpoint would connect.

| Command | `idx` | Response |
|---|---|---|
| `HBM_WRITE` / `HBM_READ` | `{row, slot}` | `DATA` for a read |
| `SET_AXON` | axon number | – |
| `LOAD_MODELS` | HBM row of model 0 | – (reads 16 rows; model `m` is in slots 0–2 of row `idx + m`) |
| `WRITE_MODEL` | model number | – |
| `SET_CFG` | 0 axon pointer base, 1 neuron pointer base, 2 URAM rows in use, 3 axon rows in use | – |
| `STEP` | – | any number of `SPIKE`, then `STEP_DONE {rows read, cycles}` |
| `READ_MEM` / `WRITE_MEM` | neuron number | `DATA {spike, V}` for a read |

After reset, `busy` stays high while the core clears all membranes
(2 × 4,096 clocks) and the axon memory (8,192 clocks).

The HBM port (`hbm_req_t`) issues one request per clock. A write carries
one strobe bit per slot. Read data returns in order, one row per clock,
with no backpressure.

## Files

| File | Contents |
|---|---|
| `rtl/hs_pkg.sv` | Sizes, word formats, command encodings. |
| `rtl/hiaer_core.sv` | Top: command decoder, step sequencer, axon and spike event sources, HBM arbitration. |
| `rtl/neuron_lane.sv`, `rtl/neuron_unit.sv`, `rtl/noise_gen.sv`, `rtl/membrane_bank.sv` | One lane and its parts. |
| `rtl/axon_event_mem.sv` | Input axon events. |
| `rtl/pointer_fetch.sv`, `rtl/synapse_fetch.sv` | The two routing phases. |
| `rtl/sync_fifo.sv` | FIFO used for the pointer queue, the spiking-row queue and the synapse rows in flight. |
| `tb/hbm_model.sv` | Behavioural HBM. It has a fixed latency and random stalls. |
| `tb/*_tb.sv` | One self-checking testbench per module. |
| `tb/hiaer_core_tb.sv` | End to end at reduced size. |
| `tb/hiaer_core_full_tb.sv` | End to end at full size. |
| `tb/hiaer_core_mlp_tb.sv`, `tb/hiaer_core_cnn_tb.sv` | Benchmark-shaped networks at full size. |

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself, and
each has a watchdog. For example:

```
verilator --binary --timing --assert -Wno-fatal rtl/hs_pkg.sv rtl/*.sv \
    tb/hbm_model.sv tb/hiaer_core_tb.sv --top-module hiaer_core_tb
./obj_dir/Vhiaer_core_tb
```

The two end-to-end benches work as the host would:

- they lay out networks in HBM with the alignment rule above;
- they load models and configuration;
- they run steps;
- they compare every output spike and the membranes with a reference model
  in the bench, which has its own copy of the noise sequences.

`hiaer_core_tb` runs at reduced sizes (2,048 neurons, 16-entry pointer
queue). It runs two networks:

- the four-neuron, two-axon example network: two LIF neurons with almost no
  leak, one leaky LIF neuron and one noisy binary neuron;
- a random network of 300 neurons over five models.

`hiaer_core_full_tb` runs the core at its default sizes with no parameter
overrides:

- the same example network;
- a 131,072-neuron, 131,072-axon random network.

It takes about 25 s in Verilator.

Both benches count the mechanisms they exercise and fail if any count is
zero:

- sweep spikes;
- input axons;
- pointer/synapse phase alternation;
- output reports;
- multi-segment regions;
- empty regions;
- HBM stalls;
- response backpressure;
- noise;
- leak;
- binary clears.

Two more benches run networks shaped like the published benchmarks on the
full-size core. The trained weights and datasets are not available, so the
weights and inputs are random; the point is the core's behaviour at those
sizes, checked against the same reference model.

- `hiaer_core_mlp_tb` runs both binary-neuron MNIST MLPs:
  - 784-128-10, with 101,632 synapses, takes about 7,500 clocks and
    2,700 HBM rows per image;
  - 784-2000-1000-10, with 3,578,000 synapses, takes about 400,000 clocks
    and 166,000 rows per image.
- `hiaer_core_cnn_tb` runs two convolutional networks:
  - the DVS-gesture CNN, with one 5×5 stride-2 convolution and three fully
    connected layers: 7,938 axons, 1,115 LIF neurons, and the convolution
    unrolled into 164,004 stored synapses;
  - the stride-2 LeNet-5 with binary neurons: 1,334 neurons and 101,640
    stored synapses, at about 55,000 clocks per image.

These clock counts come with the HBM model stalling a fifth of the time.

The simulator is assumed to be two-state with random initial values. All
state that is read is reset or cleared explicitly.

## Capacity against the benchmark networks

HBM stores one synapse per connection. A convolution's shared kernel is
therefore stored once per connection, not once per weight, so the count
that matters is the number of connections. Worked out from the layer
shapes:

| Network | Neurons | Axons | Stored synapses | Share of 67.1 M slots |
|---|---|---|---|---|
| MLP 784-128-10 | 138 | 784 | 101,632 | 0.2 % |
| MLP 784-2k-1k-10 | 3,010 | 784 | 3,578,000 | 5.3 % |
| LeNet-5, stride 2 | 1,334 | 784 | 101,640 | 0.2 % |
| LeNet-5, max pool | 5,814 | 784 | 286,120 | 0.4 % |
| DVS CNN C(1) | 1,115 | 7,938 | 164,004 | 0.2 % |
| DVS CNN 3C(100) | 109,615 | 7,938 | 53,311,004 | 79 % |
| DVS CNN 90×90 | 17,709 | 16,200 | 2,293,704 | 3.4 % |
| CIFAR-10 CNN | 38,122 | 15,360 | ≤ 35.8 M (layer shapes not fully known) | ≤ 53 % |
| DVS Pong CNN | 21,638 | 14,112 | 7,707,648 | 11 % |

All of them fit in one core, with up to 131,072 neurons, 131,072 axons and
67.1 M slots. The 3C(100) network comes closest on both neurons and HBM.
The largest fan-out of any source is 2,000 targets, which needs 125
segments; a pointer can address 255.

## Departures and open points

- **HBM size.** The figure of the memory organisation prints "8K" beside the
  HBM, but the text gives 8 GB per FPGA card. The design follows the text: a
  32-core FPGA gives each core 256 MB, which is 2^23 rows of 32 bytes.
- **Neuron models.** In the original system, each model in HBM points to
  the section of neuron pointers that uses it. Here the model table is
  also stored in HBM, but the core copies it into 16 registers with
  `LOAD_MODELS`. Each model then names the end of its neuron range, and
  neuron pointers are grouped by model only through that numbering. The
  table is not reread at every step.
- **One HBM port.** The original hardware spreads the lookups of both
  routing phases over several HBM ports. Here each core has one port, and
  the phases use it in turn, so HBM-bound steps take longer than they
  would with several ports. The time step's arithmetic and results do not
  change.
- **Neurons with no synapses.** The original compiler gives each such
  neuron a segment of zero-weight synapses. This core also accepts a
  pointer with zero rows, and skips it.
- **Own choices.** The following are not published and are this design's
  own:
  - the command set, word encodings and pointer width;
  - the number of models;
  - the noise generator;
  - the 35-bit membrane, which wraps on overflow;
  - the queue depths;
  - the handover rule between the two routing phases;
  - the single HBM port per core.

  The published microarchitecture goes no further than memories, widths,
  data layout and the order of operations, so cycle counts from this RTL
  are not those of the original hardware.
- **Not included.**
  - the HBM itself, which is a behavioural model in `tb/`;
  - the PCIe endpoint;
  - the hierarchical multicast address-event bus between cores;
  - the FPGA-to-FPGA and server-to-server links.

  So a single core is all there is. It has no spike input from or output
  to other cores beyond the host streams.
