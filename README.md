# Event-driven time-to-first-spike SNN inference engine

This is synthesizable SystemVerilog for a small event-driven spiking neural network
(SNN) accelerator that sits in the programmable logic of a Zynq-7020-class FPGA. It follows
the architecture described in *Hardware-Software Co-Design for Event-Driven SNN
Deployment on Low-Cost Neuromorphic FPGAs* (Lee, Chakraborty, Alam, Park). That
description names the blocks and gives the key sizes. The block internals, word formats
and register map here are one concrete way to build it; they are not the authors' own RTL.

The engine only does work when a spike arrives. For each image, the host sends the input
spikes (one per lit pixel, tagged with a timestep) in time order. Each input spike is
expanded into its list of synapses. Every synapse adds its weight to one leaky
integrate-and-fire (LIF) neuron. A neuron that crosses its threshold emits one spike, its
*first* spike, and then stays silent for the rest of the image. The output neurons are
split into class populations. The class whose population fires first is the prediction:
this is a grouped time-to-first-spike (TTFS) readout. The network itself (descriptors,
packed synapses, thresholds and the population layout) is held in tables that the host
writes before inference. So the same hardware runs any network that fits those tables.

The reference configuration is the one the design was demonstrated with:
- a 784-input, 150-output linear TTFS classifier for MNIST;
- 10 class populations of 15 neurons each;
- 2,048 addressable neurons, arranged as 16 groups of 128;
- an 80 MHz clock.

## How an image travels through the design

```
 s_axis ──► axi_ingress ──► event_router ──► synapse_router ──► neuron_core ──► ttfs_decoder ──► m_axis
 (DMA)      unpack words     in-order FIFO    descriptor +      16 × neuron_group   grouped TTFS      result word
            + end-of-image   (stalls stream   synapse fetch,     (128 LIF each)      readout           + RESULT reg
              marker          when full)      1 synapse/cycle         ▲
                                                   ▲                  │ thresholds
                                                   │                  │
                                        connectivity_table ◄── axi_lite_ctrl ──► pl_counters
                                        (descriptors,          (AXI4-Lite         (latency and
                                         packed synapses)       registers)         event counters)
```

An image is a run of spike events followed by an **end-of-image (EOI) marker**. The marker
travels through every stage in order behind the image's last event. When it passes, each
stage finishes the image:
- the neuron groups return every neuron to rest in a single cycle;
- the decoder makes its decision and clears its per-class state.

No stage waits for a global "done". Because of this, the next image's spikes can follow
straight behind the marker, and several images can be in the pipeline at once. Up to 4
images may be in flight (`MAX_INFLIGHT`). Past that limit, the ingress holds back the first
word of the next image.

All blocks share one clock (`aclk`) and one asynchronous active-low reset (`aresetn`).
Shared types live in `snn_pkg`:
- `spike_ev_t`: an input or output spike, `{eoi, t, id}`;
- `syn_ev_t`: one synaptic event, `{eoi, t, target, w}`;
- `conn_desc_t`: a connectivity descriptor, `{count, base}`;
- `synapse_t`: one packed synapse, `{target, w}`;
- `cfg_wr_t`: one configuration-memory write;
- `result_t`: the decoder's result for one image.

## Input spike stream

Each image arrives as a burst of 32-bit AXI4-Stream words, one input spike per word:

| bits    | field                                                        |
|---------|--------------------------------------------------------------|
| 10:0    | source neuron id (the pixel index for the input layer)       |
| 23:16   | timestep of the spike (0..255)                               |
| 31      | null word: carries no spike                                  |

`TLAST` on a word ends the image. If that word also carries a spike, the ingress sends the
spike first and the EOI marker one cycle later. `TREADY` is low during that extra cycle.

An image with no spikes at all is sent as a single null word with `TLAST`. Its result is
`no_spike = 1`.

A spike whose id is outside the address space is dropped and counted. With the default
2,048 neurons, every 11-bit id is in range.

Spikes should come in nondecreasing timestep order. TTFS encoding does this naturally:
brighter pixels fire earlier. The neuron leak (see below) assumes this order. If a spike
arrives out of order, it is simply charged no leak.

## Connectivity: descriptors and packed synapses

`connectivity_table` holds two memories, both written by the host:

- **Descriptor memory**: one entry per source id (2,048 entries). An entry is
  `{count[11:0], base[16:0]}`: source *s* owns synapse entries `base .. base+count-1`.
- **Synapse memory**: `SYN_DEPTH` = 131,072 entries. Each entry is
  `{target id[10:0], weight[7:0] signed}`. This holds the 784 × 150 = 117,600 synapses
  of the MNIST classifier, with room to spare. It takes 2.5 Mbit, about half of the
  device's block RAM.

Because the synapses are packed, sparse and dense layers cost the same per synapse. The
fan-out of one source can be anything from 0 to 4,095 synapses.

`synapse_router` takes one spike at a time from the event router and serves it as follows:
1. It reads the spike's descriptor. That takes one cycle, and in the same cycle it issues
   the read of the first synapse.
2. It then issues one synapse read per cycle until the fan-out is done.
3. Each returned synapse leaves as a `syn_ev_t` carrying the spike's timestep.

A spike with fan-out *F* therefore costs **F + 1 cycles**; a spike with no synapses costs 2.
The router takes the next spike while the last read of the previous one is still in
flight. An EOI is forwarded only once all earlier reads have returned.

## The neuron fabric

`neuron_core` holds `NUM_GROUPS` = 16 `neuron_group`s of `GROUP_SIZE` = 128 neurons. A
target id is split in two:
- `id[10:7]` picks the group;
- `id[6:0]` picks the neuron inside that group.

At most one synaptic event enters per cycle, so at most one group fires per cycle. The
core's output is the OR of the groups' registered spike outputs, with the group index put
back on top of the neuron index.

Inside a group, each neuron has three kinds of state:
- a memory word `{t_last[7:0], v[15:0]}`: the timestep of its last update and its signed
  membrane potential;
- a 16-bit signed threshold, in a separate memory loaded by the host;
- two flag bits held in registers: `touched` (v is valid in this image) and `fired` (the
  neuron has already spiked in this image).

An event is handled in a two-stage read-modify-write pipeline:

1. **Stage 0** reads the neuron's memory word, its threshold and its flags.
2. **Stage 1** computes the new state:
   - `v_old = touched ? v : 0`;
   - leak: `v_leak = v_old` moved towards zero by `leak × (t − t_last)`, without crossing
     zero (this is a lazy, linear leak; `leak` is a register and 0 gives a plain
     integrate-and-fire neuron);
   - `v_new = saturate16(v_leak + w)`;
   - write back `{t, v_new}`;
   - fire if `!fired && v_new >= threshold`.
   The spike `{neuron, t}` is registered. It leaves the group **two cycles** after the
   event came in.

The leak is applied lazily: only when an event touches the neuron, for all the timesteps
that have passed since it was last touched. Nothing ever sweeps the whole neuron array.
Neurons that receive no input cost nothing.

**Bypass.** Suppose the same neuron receives events in two back-to-back cycles. Then
stage 0 would read the memory word in the same cycle that stage 1 is writing it, and get
the old value. The group detects the address match and forwards stage 1's new word (and
the updated `fired` flag) into stage 0 instead. Two cases trigger this: a synapse list
that names the same target twice in a row, or the first target of one spike matching
the last target of the previous one. With a fully connected layer this is rare, because
the synapse router leaves a one-cycle gap between spikes. It is still required for
correctness.

**Reset between images.** The EOI marker clears every `touched` and `fired` bit in one
cycle. An untouched neuron reads as `v = 0`, so the membrane memory never needs to be
swept. If the next image's first event reaches stage 0 in the same cycle, it sees the
cleared flags.

## Grouped first-spike readout

`ttfs_decoder` treats the `num_classes` × `class_size` neurons starting at id `out_base`
as class populations. By default these are 10 × 15 neurons from id 784, placed right
after the 784 input ids. The layout is set through registers, so other layouts work
without any change to the RTL.

For every output spike, the decoder finds the spike's class and keeps two values per
class:
- the earliest spike time seen in this image;
- how many of the class's neurons spiked at exactly that time.

When the EOI arrives, the decoder picks the winner by these rules, in order:

1. the class with the earliest first spike;
2. if classes tie on that time, the one with more neurons firing at it;
3. if still tied, the lower class index.

If no output neuron fired, the result is `no_spike = 1` with label 0. The result is ready
one cycle after the EOI. It is offered on `m_axis` as
`{first_t[31:24], win_count[23:16], no_spike[8], label[3:0]}`, and is also readable in
the RESULT register.

If the host has not taken the previous stream word when a new result arrives, the old
word is replaced and the STATUS overflow flag is set.

## Timing

- **Throughput** is one synaptic event per clock. An image of *S* input spikes, each with
  fan-out *F*, takes `S·(F+1) + 6` cycles from its first stream word to its result, when
  the pipeline is otherwise idle. For the MNIST network (F = 150) this is
  `151·S + 6` cycles. For example, 20 spikes take 3,026 cycles (37.8 µs at 80 MHz).
- **Back-to-back images** overlap: the EOI of one image is followed directly by the next
  image's spikes. While the input keeps the synapse router busy, consecutive results are
  exactly `S·(F+1) + 2` cycles apart. The 2 extra cycles are one to drain the last
  synapse read and one to pass the EOI.
- **Stalls.** The event FIFO (512 entries) absorbs input bursts. When it is full, the
  ingress deasserts `TREADY` and every refused cycle is counted.

`pl_counters` times the PL path only. It measures, per image:

| counter      | from                                        | to                                           |
|--------------|---------------------------------------------|----------------------------------------------|
| FIRST_CYC    | first word of the image accepted            | first output-population spike reaches decoder |
| IMAGE_CYC    | first word of the image accepted            | result ready                                 |
| SERVICE_CYC  | previous image's result                     | this image's result                          |

Images may overlap, so the counter block keeps each in-flight image's start cycle in a
small FIFO.

**Difference from the published figures.** The publication reports a 12-cycle
first-spike latency and an 11-cycle steady-state service latency per image (0.150 µs and
0.1375 µs at 80 MHz). It does not say where its counters start and stop. With this RTL an
MNIST image (about 100–150 input spikes × 150 synapses) takes tens of thousands of
cycles, so those figures cannot be reproduced. Any design that visits each of the
784 × 150 synapses one at a time would behave the same way.

## Register map (AXI4-Lite, 32-bit registers)

| offset | name        | access | meaning |
|--------|-------------|--------|---------|
| 0x00   | CTRL        | W  | bit0: clear counters; bit1: clear the overflow flag |
| 0x04   | STATUS      | R  | bit0: busy (images in flight); bit1: new result since RESULT was last read; bit2: result overflow |
| 0x08   | RESULT      | R  | last result word (same format as `m_axis`); reading it clears STATUS bit1 |
| 0x0C   | FIRST_CYC   | R  | first-output-spike latency of the last image |
| 0x10   | IMAGE_CYC   | R  | first-word-to-result latency of the last image |
| 0x14   | SERVICE_CYC | R  | interval between the last two results |
| 0x18   | IMAGE_CNT   | R  | images completed |
| 0x1C   | LEAK        | RW | leak per timestep (reset 0) |
| 0x20   | OUT_BASE    | RW | first output-population neuron id (reset 784) |
| 0x24   | CLASS_SIZE  | RW | neurons per class (reset 15) |
| 0x28   | NUM_CLASSES | RW | number of classes, at most 16 (reset 10) |
| 0x2C   | CFG_SEL     | RW | 0: descriptors; 1: synapses; 2: thresholds |
| 0x30   | CFG_ADDR    | RW | entry index; increments after every CFG_DATA write |
| 0x34   | CFG_DATA    | W  | writes one entry of the selected memory |
| 0x38   | SYN_EVENTS  | R  | synaptic events processed |
| 0x3C   | DROPPED     | R  | input spikes dropped (id out of range) |
| 0x40   | STALL_CYC   | R  | cycles the input stream was refused by a full queue |

The write channel takes the address and the data together. Write strobes are ignored:
every write is a full 32-bit word. CFG_DATA has one layout per memory:
- descriptors: `{count[31:20], base[16:0]}`;
- synapses: `{weight[23:16], target[10:0]}`;
- thresholds: `threshold[15:0]`, written at the neuron's global id.

To load a model, write CFG_SEL and CFG_ADDR once, then stream CFG_DATA writes. Load all
2,048 descriptors (give unused sources `count = 0`), then the synapses, then the
thresholds of the neurons in use. Configure only while STATUS.busy is 0.

## Sizes

| parameter (top) | default | origin |
|-----------------|---------|--------|
| NUM_GROUPS × GROUP_SIZE | 16 × 128 = 2,048 neurons | published architecture |
| SYN_DEPTH       | 131,072 synapses | chosen to hold the 117,600 synapses of the 784→150 classifier |
| FIFO_DEPTH      | 512 events | chosen |
| MAX_INFLIGHT    | 4 images | chosen |
| class layout    | 10 × 15 from id 784 (registers) | published classifier; base id chosen |
| weight / membrane / threshold / timestep | 8 / 16 / 16 / 8 bits | chosen |

Coarse synthesis of the top gives about 5.5 k flip-flops and 2.64 Mbit of memory. The
synapse memory accounts for 2.49 Mbit of that, and the 16 membrane and threshold
memories for 82 kbit. The published implementation fills all 140 block-RAM tiles of the
XC7Z020. This RTL uses about half of them, so SYN_DEPTH could be roughly doubled on that
device.

## Where this RTL goes beyond the published description

The publication describes what the blocks are and what they do. It does not describe
how they work inside. Everything below is a design choice made here:

- the stream word format and how an image ends (TLAST, EOI marker, null word);
- the event FIFO and its stall behaviour;
- the descriptor-plus-packed-synapse organisation of the connectivity table;
- the LIF details: a linear leak applied lazily, 16-bit saturation, per-neuron
  thresholds, one spike per neuron per image;
- the pipeline with its bypass, and the flag-based reset between images;
- the tie-break rules of the readout;
- the counter definitions;
- the whole register map.

Outside this RTL:
- the host software that packs spikes and loads the model;
- the DMA engine;
- the software reference model used to cross-check predictions.

They connect through `s_axis`, `m_axis` and the AXI4-Lite port. Layers other than the
single linear layer the design was demonstrated with (convolution, pooling, several
layers chained on the device) are not supported in hardware.

## Files

| file | content |
|------|---------|
| `rtl/snn_pkg.sv` | shared widths, event and configuration types, register offsets |
| `rtl/snn_accel_top.sv` | top level: wiring of all blocks, AXI ports |
| `rtl/axi_lite_ctrl.sv` | register block, configuration writes |
| `rtl/axi_ingress.sv` | stream unpacking, EOI generation |
| `rtl/event_router.sv` | in-order event FIFO with back-pressure |
| `rtl/synapse_router.sv` | descriptor lookup and synapse streaming |
| `rtl/connectivity_table.sv` | descriptor and synapse memories |
| `rtl/neuron_core.sv` | dispatch to the 16 groups, spike merge |
| `rtl/neuron_group.sv` | 128 LIF neurons, pipeline, bypass, reset |
| `rtl/ttfs_decoder.sv` | grouped first-spike readout, result stream |
| `rtl/pl_counters.sv` | latency and event counters |
| `tb/snn_ref_pkg.sv` | behavioural reference for the LIF update and the readout rule |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_snn_accel_top.sv` | end-to-end test at the default size |
| `tb/tb_spike_drop.sv` | one image with 0 / 25 / 50 / 75 % of its input spikes dropped |

## Simulating

Every testbench checks itself against independently computed expected values. Each one
ends by printing `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/snn_pkg.sv tb/snn_ref_pkg.sv tb/tb_snn_accel_top.sv --top-module tb_snn_accel_top
./obj_dir/Vtb_snn_accel_top
```

Replace `tb_snn_accel_top` with any other testbench name. The end-to-end test runs the
top at its default parameters, which takes about 15 s of simulation. It does the
following:
1. loads a 784→150 network (pseudo-random weights and thresholds, in the same shape as
   the MNIST classifier) through AXI4-Lite;
2. streams 39 images;
3. compares every label, first-spike time and population count with the reference.

Along the way it checks that:
- the image latency is exactly `151·S + 6` cycles;
- in a back-to-back burst, consecutive results are `151·S + 2` cycles apart;
- the event-queue stall, the in-flight limit, the membrane bypass, the result overflow,
  an empty image, a first-spike tie and a nonzero leak each happen at least once.

The block testbenches drive random traffic against small behavioural models. Most run
the blocks at their default sizes.

Not verified: timing closure at 80 MHz, resource use on the real device, and accuracy on
real MNIST data with trained weights (neither is available to these testbenches).
