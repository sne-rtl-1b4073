# SNE: an event-driven convolution engine for spiking networks

SNE runs the convolutional layers of a spiking neural network on the output of an
event camera. It does not process frames. It takes a list of events, one 32-bit
word each, and for every event it updates only the neurons that the event can
reach. The work done therefore grows with the number of events, not with the
image size: a quiet scene costs almost nothing.

The engine is built from **slices**. A slice holds 16 **clusters**. A cluster has
one leaky integrate-and-fire (LIF) datapath, shared in time by 64 neurons. The
default build has 8 slices, so 8 × 16 × 64 = 8192 neurons. In one clock cycle all
128 clusters each update one neuron. At 400 MHz that is 51.2 G neuron updates per
second.

Two DMAs bring events and weights in from system memory. A stream crossbar
delivers them to the slices. A collector merges the slices' output spikes, and
the crossbar sends that stream back to memory or on to another slice. Software
programs everything through an APB register port.

This RTL follows the published architecture of SNE (Di Mauro et al., "SNE: an
Energy-Proportional Digital Accelerator for Sparse Event-Based Convolutions").
The publication gives the block structure, the sizes and the neuron model. It
leaves out most interfaces, encodings and control details. Those were chosen
here, and each choice is marked below and at the top of its source file.

## 1. Events and the three operations

An event in memory is one 32-bit word:

| bits  | 31:30 | 29:22 | 21:14 | 13:7   | 6:0    |
|-------|-------|-------|-------|--------|--------|
| field | OP    | Time  | CH    | X_ADDR | Y_ADDR |

The field order comes from the published format. The widths are this design's
choice. With them the design supports 256 time steps, 256 channels and a
128 × 128 sensor.

| OP | name     | effect                                                                  |
|----|----------|-------------------------------------------------------------------------|
| 0  | `RST`    | sets every neuron's potential to zero; used at the start of an inference |
| 1  | `UPDATE` | adds the event's weights to every neuron whose 3×3 window holds (X, Y)  |
| 2  | `FIRE`   | ends time step `Time`: each neuron above threshold emits a spike and restarts at zero |
| 3  | –        | ignored                                                                 |

An input stream for one inference looks like this: `RST`, the `UPDATE`s of step
1, `FIRE` 1, the `UPDATE`s of step 2, `FIRE` 2, and so on. Time stamps must not
decrease.

Inside the engine a word travels as a 35-bit **stream word** (`sne_pkg::stream_t`).
It has a kind bit (E for an event, W for weights), the OP, and 32 bits of data. For
an event the data is the memory word with its OP bits cleared. A weight word
carries eight 4-bit signed weights, W0 in bits 3:0. The DMAs convert between the
two formats.

## 2. Neuron model

Each neuron has an 8-bit signed potential V. Weights are 4-bit signed. Per time
step:

- **Leak.** V moves toward zero by the programmable amount L, and stops at zero.
  This is a linear stand-in for exponential decay.
- **Integrate.** Each `UPDATE` adds `W[ky][kx]`, saturating at −128 and +127.
- **Fire.** On `FIRE`, a neuron with `V > Vth` emits a spike and is set to 0.

Vth and L are set per slice. This design chose several details here: the leak
goes toward zero, the compare is strict, the sum saturates, and a neuron that
fires restarts at zero. `sne_lif_datapath` evaluates one neuron per cycle and is
purely combinational.

### Deferred leak (time of last update)

A cluster leaks its neurons only when an operation reaches it. It keeps a
**TLU** register: the time step of the last operation it took part in. When an
operation with time `t` starts, the cluster computes `leak_total = (t − TLU) × L`
once and applies it to each neuron during the sweep, then sets `TLU = t`. A
cluster that sees no events for many steps does no work for them. The result is
the same as leaking once per step, because leaking by `a` and then by `b`,
stopping at zero, equals leaking by `a + b`.

## 3. Inside a cluster: the neuron sweep

All clusters of a slice run in lock step, driven by the slice's **sequencer**:

```
cycle   c          c+1        c+2        ...  c+64       c+65
        start      n=0        n=1             n=63       tail
        (decode)   read b0    read b1         read b1    write b1
                              write b0        write b0   (FIRE: marker)
```

- In the **start** cycle the decoder accepts the stream word. Each cluster then
  latches the event, its 9 kernel weights, whether it takes part, and
  `leak_total`.
- For each neuron `n`, the **address shifter** finds the neuron's output position
  `(base_x + n % 8, base_y + n / 8)`. It also finds the kernel tap that links it
  to the event, if any.
- The LIF datapath computes the new state. The result is written back one cycle
  later.

**Double buffering.** The 64 potentials are split over two single-port banks
(`sne_state_mem`): even neurons in one, odd neurons in the other. While neuron
`n` is read from one bank, neuron `n−1` is written to the other. Each bank sees
at most one access per cycle, and the cluster still completes one update per
cycle. An assertion in `sne_cluster` checks that a bank is never read and
written in the same cycle. The paper's banks are latch arrays; here they are
flip-flop arrays with the same access pattern.

**Gating.** On an `UPDATE`, the **address filter** tests whether the event's
3×3 window overlaps the cluster's 8×8 tile. A cluster that misses stays idle for
the whole sweep: it reads nothing and writes nothing. Silicon would clock-gate
it. A cluster that takes part writes back only neurons that gained a weight or
owe leak. `RST` and `FIRE` activate every cluster.

**Spikes.** During `FIRE`, each neuron that fires pushes
`{UPDATE, t, out_ch, x, y}` into the cluster's 4-entry output FIFO. The word is
already an input event for the next layer. In the tail cycle the cluster pushes
a `FIRE` marker for step `t`. When any FIFO is full, the sequencer **stalls**:
the neuron address holds until there is room again. No spike is dropped.

## 4. Mapping a layer

Each cluster has a 32-bit mapping register:

| bits   | field                                                  |
|--------|--------------------------------------------------------|
| 6:0    | `base_x`: X of the tile's top-left corner              |
| 14:8   | `base_y`: Y of the tile's top-left corner              |
| 23:16  | `wset`: offset added to the event's CH to pick a kernel |
| 31:24  | `out_ch`: channel written into the spikes              |

The convolution is 3×3, stride 1, with "same" padding. An input event at
`(x, y)` reaches output neuron `(ox, oy)` through tap
`(kx, ky) = (x − ox + 1, y − oy + 1)` when both values lie in 0..2.

Each slice has a **filter buffer** of 256 kernels of 3×3 weights. A cluster
uses kernel `(CH + wset) mod 256` for an event on input channel CH. This way
the clusters of one slice can compute different output channels from the same
event. Kernels are loaded as a flat list of weights: kernel 0 taps 0..8, then
kernel 1, and so on, eight weights per word. Writing the slice's clear register
rewinds the load pointer.

Two examples:

- **32×32 map, one output channel per slice.** Tile the 16 clusters 4×4, with
  `base = (8·(c mod 4), 8·(c div 4))`. Give every cluster of slice k
  `wset = n_in·k` and `out_ch = k`. Eight output channels are computed per pass.
- **16×16 map, four output channels per slice.** Give each group of 4 clusters
  a 2×2 tiling, and a `wset` of `n_in` times its output channel.

A layer larger than 8192 neurons runs in passes. Software sends the same input
events once for each group of output channels and collects each pass's spikes
through a DMA.

## 5. Moving events: DMA, crossbar, collector

**DMA (`sne_streamer`).** Each DMA does a linear transfer of LEN words at BASE,
in either direction. It converts between memory words and stream words, and
buffers through a 16-word FIFO. When reading, it issues a request only while
the FIFO has room for every outstanding reply, so memory latency never
overflows the buffer. The memory port uses request/grant, with in-order read
data marked by `rvalid`.

**Crossbar (`sne_xbar`).** The crossbar has three sources: DMA0, DMA1 (both
reading memory) and the collector. It has ten sinks: slices 0–7, then DMA0 and
DMA1 (both writing memory). Each source has a destination mask:

- One bit set gives a point-to-point transfer.
- Several bits set gives a broadcast. Each selected sink takes the word when it
  is ready. The source is held until all of them have it, and a sink that
  already took the word is not given it twice.

When two sources want the same sink, the lower source index goes first.

**Collector (`sne_collector`).** The same module appears inside each slice,
merging its 16 cluster FIFOs, and at the top, merging the 8 slices. Spikes pass
one per cycle, chosen round-robin. A `FIRE` marker waits at the head of its
input until every enabled input shows one. Then a single `FIRE` is sent and all
of them are consumed. So the merged stream has all spikes of step `t` before
the one `FIRE t`, and can be used as the input of the next layer. The top
collector's enable mask selects which slices take part.

### Layer-pipelined mode

A small network can be placed with one layer per slice. Each slice's output
then goes straight into the slice of the next layer, and all layers work at
the same time. Setting the mode bit changes two things:

- The top collector no longer merges FIRE markers. Every word from a slice,
  its FIRE marker included, is passed on alone and tagged with the slice it
  came from.
- The crossbar no longer uses the collector's own destination mask. It uses a
  separate mask for each slice, so slice 0's words can go to slice 1, slice
  1's to slice 2, and the last layer's to a DMA.

A layer's FIRE marker therefore becomes the next layer's `FIRE` operation.
Time steps flow down the pipeline with no extra control.

Slices feeding slices can deadlock. Suppose the collector's output register
holds a word for slice B. Slice B is busy with a FIRE sweep and stalls on a
full output FIFO. That FIFO can only drain through the same collector register
that is waiting for B. To rule this out, the collector picks a slice's word
only when every slice it is routed to is idle and is not taking another word
in that cycle. The word is then accepted on the next cycle. This guarantee
holds if two rules are kept:

- the routes form a chain or tree with no loop;
- the slices fed by the collector get no input from a DMA.

In the usual setup DMA0 feeds the first layer and DMA1 collects the last.

## 6. Registers

The APB port (16-bit address, 32-bit data, no wait states) is split by
`PADDR[13:12]`:

| base   | block                | registers (byte offsets) |
|--------|----------------------|--------------------------|
| 0x0000 | configuration        | `0x000+4s` crossbar mask of source s; `0x040` collector enable mask; `0x044` bit 0 layer-pipelined mode; `0x080+4k` destination mask of slice k's output in that mode; `0x400+0x80k` slice k `{leak[15:8], vth[7:0]}`; `0x404+0x80k` slice k weight-pointer clear (write any value); `0x440+0x80k+4c` cluster c mapping |
| 0x1000 | DMA0                 | `0x0` CTRL: write bit0 start, bit1 direction (1 = to memory), bit2 weights; read busy in bits 31 and 0, dir in bit 1, kind in bit 2. `0x4` BASE (bytes), `0x8` LEN (words), `0xC` words done |
| 0x2000 | DMA1                 | same as DMA0 |

Any other address gives PSLVERR. All registers reset to zero.

A typical layer run:

1. Write the mappings, LIF parameters and collector mask.
2. Route DMA0 to the slices, then run DMA0 on the kernel table with kind =
   weights.
3. Route the collector to DMA1, and start DMA1 toward memory with the expected
   output length.
4. Run DMA0 on the event list.

## 7. Timing

| item                               | cycles                          |
|------------------------------------|---------------------------------|
| `RST` / `UPDATE` / `FIRE` in a slice | 1 + 64 + 1 = 66 (more if stalled) |
| weight word into a slice           | 1                               |
| crossbar                           | combinational, no added cycle   |
| collector                          | 1 register stage, 1 word/cycle  |

All slices process a broadcast event at the same time. The paper quotes
**48 cycles** per input event (120 ns at 400 MHz). It also states 64 neurons per
cluster, updated one per cycle. These two numbers do not fit together, and this
RTL follows the second: one event takes 66 cycles, 165 ns at 400 MHz. The
paper's own execution diagram agrees with this choice. It shows an UPDATE
starting at cycle 0 and the following FIRE starting at cycle 65. Peak
throughput is still 128 neuron updates per cycle, the figure behind the paper's
51.2 GSOP/s. Inference time estimates built on the 48-cycle figure are about
1.4× optimistic for this RTL.

## 8. Where this RTL departs from the paper or goes beyond it

- **Paper's own:** slice, cluster, sequencer, decoder, collector, crossbar with
  point-to-point and broadcast, two DMAs with a 16-word FIFO, APB node and
  register interface. Also the sizes: 8 slices, 16 clusters, 64 neurons, 4-bit
  weights, 8-bit state, 256 weight sets. Also the RST/UPDATE/FIRE operations,
  the two state banks with double buffering, the per-cluster TLU, per-cluster
  output FIFOs, and the address filter and shifter.
- **This design's choices:** field widths and bit positions; the stream word;
  8×8 tiles, stride 1, "same" padding; kernel choice as CH + offset;
  leak-toward-zero, strict threshold, saturation and reset-on-fire; FIFO depth 4
  and the stall; FIRE end-of-step markers and how the collector aligns them;
  round-robin and fixed-priority arbitration; the register map; the
  request/grant memory protocol. For the layer-pipelined mode, which the
  paper names, this design chose per-slice routes, unmerged FIRE markers and
  the collector look-ahead.
- **Configuration path:** only the kernels travel over the crossbar. The
  LIF parameters, cluster mappings and routes are APB registers. The paper
  says configuration can also be loaded through a point-to-point crossbar
  transfer, but it gives no encoding for configuration words in the stream.
- **Not built:**
  - Pooling and fully connected layers. The paper does not describe how SNE
    would run them.
  - Clock-gating cells, latch-based memories and anything electrical (power,
    voltage, process).
- **Sizes:** all defaults are the paper's numbers where it gives one. Nothing
  was scaled down.

## 9. Files and simulation

| file | contents |
|------|----------|
| `rtl/sne_pkg.sv` | event/stream types, operation codes, format conversions |
| `rtl/sne_top.sv` | the accelerator |
| `rtl/sne_apb_node.sv`, `rtl/sne_conf_regs.sv` | register access |
| `rtl/sne_streamer.sv`, `rtl/sne_fifo.sv` | DMA and its FIFO |
| `rtl/sne_xbar.sv`, `rtl/sne_collector.sv` | stream interconnect |
| `rtl/sne_slice.sv`, `rtl/sne_decoder.sv`, `rtl/sne_sequencer.sv`, `rtl/sne_filter_buffer.sv` | slice level |
| `rtl/sne_cluster.sv`, `rtl/sne_addr_filter.sv`, `rtl/sne_addr_shift.sv`, `rtl/sne_lif_datapath.sv`, `rtl/sne_state_mem.sv` | cluster level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_sne_bench.sv` | benchmark layer: all clusters busy, 100 time steps |
| `tb/sne_ref_pkg.sv` | reference model: a plain per-neuron description of the layer |
| `tb/sne_tb_mem.sv` | memory model with random grant and latency |

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself through a
watchdog. To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sne_pkg.sv tb/sne_ref_pkg.sv \
          tb/tb_sne_top.sv --top-module tb_sne_top -o sim
./obj_dir/sim
```

Use the same command for any other testbench. Only the files a testbench names
are needed; `-Irtl -Itb` lets Verilator find them.

`tb_sne_top` runs the whole accelerator at its default size (8 slices) and
takes about 10 s. It programs the chip over APB. It broadcasts one kernel table
to all slices and loads a second one point-to-point into slice 3. It then
streams 122 operations over 8 time steps from memory, including two RSTs and a
step with no events, and checks every spike written back to memory against
`sne_ref_pkg`. A second phase switches to layer-pipelined mode. DMA0 feeds
slice 0, slice 0 feeds slice 1, and slice 1 writes to memory through DMA1.
The testbench checks the spikes that enter slice 1 against the slice-0 model.
It then runs the slice-1 model on those same words in the order observed,
because saturation makes the order matter, and checks the words written to
memory. It also checks that each mechanism happened: broadcast,
point-to-point, FIRE merging, sequencer stalls, idle clusters, DMA
back-pressure, slice-to-slice transfer and the look-ahead holding a word. `tb_sne_slice` checks the 66-cycle spacing of back-to-back
events.

`tb_sne_bench` runs a benchmark layer at the default size. All 128 clusters
are mapped onto one 8×8 tile, so every event makes all of them update. The
run has 300 events over 100 time steps, and a few percent of the neurons fire
per step. Every spike is checked against the reference model. A typical run
takes 401 operations in about 48,000 cycles, with 3.5 % of the neurons firing
per step. Each UPDATE takes 66 cycles. A FIRE step takes longer, because about
290 spikes must leave through the single collector output at one word per
cycle. That output bandwidth, not the neuron array, limits layers that fire
this much.

**How far to trust it.** Every module passes its own testbench. Each testbench
has also been shown to fail on a deliberately broken copy of its module. The
reference model is written at the level of the algorithm: no time-multiplexing,
no TLU, no pipeline. So the agreement covers the neuron sweep, the deferred
leak, the banking, the filter buffer, the crossbar and the collector together.
The design has not been synthesized for timing, and it has not been compared
with the original chip.
