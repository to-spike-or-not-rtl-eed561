# An event-driven convolutional SNN accelerator with interlaced memories and 8-bit address events

A spiking neural network (SNN) does no work for a neuron that stays silent.
This accelerator takes that literally. A layer is never evaluated as a dense
matrix product. Instead, the spikes of the previous layer are stored as
*address events* (AE), which are just neuron coordinates. Each event is then
applied to the 3x3 neighbourhood it touches: every spike adds the nine kernel
weights to nine membrane potentials, with no multiplications at all. After a
time step has been accumulated, a thresholding pass turns potentials above the
threshold into new events. The cost of an inference therefore scales with the
number of spikes, not with the size of the network.

The RTL implements the 8-core configuration with compressed events and
LUTRAM-style memories:

- P = 8 cores
- T = 4 time steps
- 750 words per event queue
- 256 words per membrane memory
- 8-bit events

It is built for the MNIST network 32C3-32C3-P3-10C3-10: three 3x3
convolutions with 'same' padding, a 3x3 pooling after the second one, and a
dense layer of 10 outputs.

## The interlacing trick

Everything hinges on one memory layout. Split a W x W feature map into 3x3
windows. Neuron (x, y) is stored:

- in memory **q = 3·(y mod 3) + (x mod 3)**
- at address **(y div 3)·WW + (x div 3)**, where WW = ceil(W/3)

Any 3x3 placement of a kernel then covers exactly one neuron of each of the
nine memories. A spike can therefore read and write all nine neighbours in a
single cycle, with one port per memory. The same split is used for the event
queues: an event is kept in queue q, so the thresholding unit can emit up to
nine spikes of one window in one cycle.

Because the queue index already carries x mod 3 and y mod 3, the event word only
has to store the window coordinates (i_c, j_c) = (x div 3, y div 3). For a 28x28
map each of these fits in 4 bits, so an event is 8 bits instead of 10. Codes
10–15 of a coordinate never occur. The design uses i_c = 15 as the
end-of-segment marker. If a map width ever left no spare code, `ae_codec` falls
back to a 10-bit word with two status bits (`COMPRESSED` in `snn_pkg`).

## Segments, layers and the ring buffer (`aeq`)

Each core has its own queue, made of nine memories. Events are grouped into
**segments**, one per (output channel, time step) the core produced. A
segment is delimited as follows:

- `seg_open` records the current write pointer of every memory in a start
  table.
- `seg_close` appends the marker word to every memory.

A replay (`rd_start`, `rd_seg`) loads the nine read pointers from the table.
From then on, one event is delivered per cycle: the lowest-numbered memory
whose head is not a marker. `rd_done` rises when all heads are markers. A
segment of N events takes N + 1 cycles.

Each memory is a ring buffer holding two regions:

- the events of the previous layer (being read);
- the events of the layer being computed (being written).

`new_layer` promotes the write region and frees the old read region. The two
start tables swap at the same time.

If a memory fills up, events are dropped and the sticky `overflow` flag is
set. One word is always kept free for the segment marker. A replay also stops
at the end of the readable region. An overflow therefore corrupts the result,
which the flag reports, but it can never stall the schedule. With the default
depth of 750, typical inputs fit. The worst case does not fit: every neuron
spiking at every step needs about 1600 words per layer.

## Membrane memory (`mempot`)

The membrane memory has nine memories, each with two banks of 256 8-bit
words. Every memory has:

- one combinational read port;
- one write port;
- a per-port bank select.

The convolution accumulates in bank `bank`. A thresholding pass then works
out of place:

- It reads `bank`, adds the bias and saturates.
- It writes the result to the other bank, or zero in the last time step, so
  the next output channel starts clean.
- The core then flips `bank`.

This is the double buffering of the potentials before and after a threshold
pass.

## One core (`snn_pe`)

A core owns output channels co = g·P + p. Input events are broadcast to every
core. Each core adds its own kernel, for (co, ci), through `conv_unit`:

- **Stage 1** decodes the event. For each memory m it finds the neighbour
  that memory holds, checks that the neighbour is inside the map (this is
  the 'same' padding), computes its address and picks the kernel tap. The
  tap is w[1+y−oy][1+x−ox].
- **Stage 2** reads, adds with saturation and writes back, all in one cycle.

Every potential saturates at ±127/−128. `sat` pulses when a spike clipped any
neighbour.

`threshold_unit` scans the WW·WW windows, one per cycle. It spikes where
V + bias > V_t (24). It takes WW·WW + 2 cycles: open, scan, close.

With pooling on, each full 3x3 window becomes a single pooled event (OR
pooling). That event goes to the queue and address of the pooled map. Partial
windows at the right and bottom edges are dropped, so 28 → 9.

The kernel and bias ROMs hold only the channels of their own core. Both read
synchronously.

The image enters core 0 as initial potentials pixel/2 and is thresholded T
times with zero bias. This turns grey levels into spike trains: a pixel above
50 spikes at every step.

## Schedule (`snn_controller`)

```
clear memories; load 784 pixels; threshold the image T times
for each conv layer:
  for each group of P output channels:
    for t in 0..T-1:
      for ci in 0..Cin-1:  replay segment (ci, t) from core ci mod P to all cores
      threshold (co, t) in every active core -> its queue
  new_layer
for c in 0..9, t in 0..T-1: replay (c, t) into the classification unit
```

- Core ci mod P stores segment (ci, t) as its local segment (ci div P)·T + t.
- A replay costs N + 2 cycles; a threshold pass costs WW² + 4 cycles
  including handshakes.
- The last layer has only 10 channels, so cores 2..7 sit idle in its second
  group.

The neurons are integrate-and-fire neurons without reset. A neuron spikes at
every step in which its potential is above threshold, and potentials carry
over between steps. They are cleared only when a channel is finished.

## Output layer (`classification_unit`)

The last queues hold a 9x9x10 spike map. Each event (x, y, c) adds column
(y·9 + x)·10 + c of a 10x810 weight ROM to ten 16-bit accumulators, which
again needs no multipliers. At the end, each accumulator receives T times its
bias. The class is the first index with the largest sum.

## Top level (`snn_top`)

| Port | Meaning |
|---|---|
| `start` | begin an inference |
| `in_valid` / `in_ready` / `in_pixel` | 784 pixels, raster order |
| `result_valid`, `result_class` | the classified digit (held until the next start) |
| `busy` | an inference is running |
| `overflow` | some queue dropped events in this inference |
| `sat_events` | number of (spike, output channel) updates that saturated |

Parameters: `P` (8), `AEQ_D` (750), `T_STEPS` (4), `V_T` (24). Shared
constants and the layer table live in `snn_pkg`.

## Where this departs from the source design

- **No overlap of convolution and thresholding.** The source design
  thresholds one map while the next one is already being accumulated. Here
  the two phases run one after the other. This costs about WW² cycles per
  channel group and time step.
- **Placeholder weights and biases.** Trained parameters are not available.
  The ROMs are filled from fixed integer formulas, each given in the file
  header. The network computes a deterministic but meaningless function of
  the image. To use real weights, replace `kernel_init`, `bias_init` and
  `dense_init`.
- **Repeated spiking.** The neuron model spikes repeatedly rather than once.
  The source text describes both variants; the continuously spiking one was
  chosen.
- **Choices of this design.** The following are not taken from the source
  design:
  - the threshold value;
  - the 8-bit saturation;
  - the pixel/2 input encoding;
  - the OR pooling;
  - the split of channels over cores;
  - the marker-based segments;
  - the classification unit's internals.
- **Fixed network.** Only the MNIST layer table is built in. The larger SVHN
  and CIFAR-10 networks need more layers, up to 128 channels and 32x32 RGB
  input. They would need a bigger layer table, `C_MAX`, `W_MAX` and
  classifier.
- **No host system.** There is no AXI or processing-system interface; the
  plain pixel stream stands in for it.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_ae_codec` | every coordinate of the 28x28 map |
| `tb_aeq` | random segments over two layers, replay order and N + 1 timing, overflow |
| `tb_mempot` | random traffic on both banks against a shadow copy |
| `tb_conv_unit` | random spikes and kernels against a 2-D reference, saturation count |
| `tb_threshold_unit` | potentials, events, pooling and the WW² + 2 cycle pass |
| `tb_classification_unit` | scores and class |
| `tb_snn_controller` | the full schedule against its own loop nest |
| `tb_snn_pe` | a core from image load through two layers of replay |
| `tb_snn_top` | end to end at full size, against an independent model |
| `tb_snn_overflow` | an undersized queue must flag overflow and still finish |

`tb_snn_top` runs three images at the default size. The model evaluates the
same network and replays spikes in the hardware's order, so saturation
matches bit for bit. It checks:

- the class;
- that no overflow occurred;
- the saturation count;
- the cycle count against the schedule, about 50k–80k cycles per image.

It also requires that each of these mechanisms happened at least once:

- saturation;
- pooled spikes;
- idle cores;
- empty segments.

Run any testbench with plain Verilator, for example:

```
verilator --binary --timing -Irtl rtl/snn_pkg.sv rtl/*.sv tb/tb_snn_top.sv --top-module tb_snn_top
./obj_dir/Vtb_snn_top
```
