# Event-driven CSNN accelerator with interlaced memories

A convolutional spiking neural network (CSNN) run with time-to-first-spike style
coding is extremely sparse: in a typical MNIST inference well over 90 % of the
binary activations of every layer are zero. This design exploits that directly.
Feature maps never exist as arrays of bits; they exist only as queues of
*address events*, one entry per neuron that spiked. A convolution is done by
taking each event and adding the 3x3 kernel into the nine membrane potentials
around it, so the work per layer is proportional to the number of spikes, not to
the size of the feature map.

The key to doing that at one event per clock is **memory interlacing**: every
per-pixel memory is split into nine column RAMs so that any 3x3 window, wherever
it lies, touches each RAM exactly once. The nine potentials an event updates can
then be read, incremented and written back in parallel by nine processing
elements (PEs) that are each wired to one column for good.

The default configuration is the network `28x28-32C3-32C3-P3-10C3-F10` with
T = 5 time steps, 8-bit weights and potentials, and eight parallel units.

## Interlacing and addressing

A pixel (x, y) belongs to tile (i, j) = (x/3, y/3) and to column
s = 3*(y%3) + x%3 (row-major inside the tile). A column RAM is addressed by the
tile address, so a 28x28 map needs ceil(28/3)^2 = 100 words per column.

For an event (i, j)[s], the neighbour of the spiking pixel that lives in column m
is at offset (dx, dy) with dx = f(m%3 - s%3), dy = f(m/3 - s/3), where f maps
+2 to -1 and -2 to +1 and leaves -1, 0, +1 unchanged. The neighbour's tile is
(i, j) moved by one where the in-tile position leaves 0..2. This is all the
address arithmetic the convolution unit needs; no multiplier is involved.
A neighbour whose pixel falls outside the W x H map (including the unused pixels
of a partial last tile) is masked.

The kernel memory holds each kernel already rotated by 180 degrees, so the
neighbour at offset (dx, dy) receives kernel element `3*(dy+1) + (dx+1)`. Which
element each PE gets therefore depends only on the event's column s: the nine
possible assignments are wired as constants and a 9:1 multiplexer per PE picks
one.

## Data structures

**MemPot** (`mempot`). Nine simple dual-port RAMs, one word per neuron: an
8-bit signed potential plus the *spike indicator bit*. Synchronous read,
read-first. One MemPot holds one output channel.

**Address event queues** (`aeq`). Also nine column RAMs. A queue is one binary
map (one channel, one time step). Writing: nine write counters, so up to nine
events (one per column) can be appended per clock. Each entry carries a valid bit
and an end-of-queue (EOQ) bit; the last event of a column is held back in a
register for one write so it can be stored with EOQ set, and an empty column is
stored as a single invalid entry with EOQ set. Reading: one read counter and a
column counter walk column 0 to 8, one entry per clock; an empty column costs one
cycle. Reads are asynchronous so that a stalled entry stays visible.

Each bank keeps 40 queues in fixed 100-entry regions: two layer parities
(the layer being read and the layer being written) x four local channels x five
time steps. Queue number q = (parity*4 + c/8)*5 + t; channel c lives in bank c % 8.

## Convolution unit (`conv_unit`)

Four stages, one event per clock:

| stage | work |
|---|---|
| S1 | neighbour tile addresses and border mask (combinational on the queue output) |
| S2 | MemPot read address; kernel permutation multiplexers |
| S3 | read data in; nine saturating adders |
| S4 | write back |

Two events in flight can touch the same MemPot word. If the events in S2 and S3
overlap in any column, S1, S2 and the queue stall for one cycle and a bubble
enters S3; the pair is then two stages apart, and S3 takes the value being
written back instead of the stale RAM data (forwarding from a one-entry
write-back register). Events of one queue column never overlap, so stalls only
occur at column boundaries and between queues. Additions saturate at +127/-128.

## Thresholding unit (`thresh_unit`)

After all input channels of one time step have been integrated, a sweep visits
every tile of MemPot, one tile per clock, with five stages: tile counters, MemPot
read, bias addition, threshold and write-back, queue write. A neuron fires when
V > Vt **or** its spike bit is already set, so a neuron that has fired once keeps
firing in every later time step, which is how the time-to-first-spike code is
turned into a count that later layers can use. The new spike bit is written back
with the biased potential. The bias is added once per time step.

With 3x3 max-pooling enabled, the nine comparator outputs of the tile are ORed
and at most one event is written: the tile (i, j) becomes pixel (i, j) of the
pooled map, i.e. tile (i/3, j/3), column 3*(j%3) + i%3 of the output queue.
These are produced by counters that run alongside the tile counters. A partial
edge tile is still pooled, so a 28x28 map pools to 10x10.

The same sweep with `clear` set zeroes MemPot (potential and spike bit) before
each new output channel. A sweep of an N-tile map takes N + 5 cycles.

## Units, control and classification

`csnn_unit` is one parallel unit: an AEQ bank, a MemPot, a kernel memory, a bias
memory, a convolution unit and a thresholding unit. MemPot belongs to the
convolution unit while events are integrated and to the thresholding unit during
a sweep. Unit p computes output channels p, p+8, p+16, ... All units consume the
same input event stream, taken from the bank that holds the current input
channel, and each applies its own kernel; a unit without a channel in the current
group is idle and writes nothing.

`csnn_ctrl` runs the loop nest

```
for layer l:
  for group g of 8 output channels:
    clear MemPot
    for t in 0..T-1:
      for every input channel c_in: stream queue (c_in, t) of layer l-1, drain the pipeline
      threshold into queue (g, t) of layer l and close it
after the last layer: stream every (channel, t) queue into the classifier
```

Keeping one output channel in MemPot across all time steps is what lets one small
MemPot per unit serve the whole network.

`class_unit` is the final F10 layer. For every event of the last convolution
layer (in all time steps) it adds the weight row of that input neuron,
n = (channel*10 + y)*10 + x, to ten 24-bit scores, and reports the arg-max
(lowest index on ties). Because a fired neuron keeps firing, early spikes are
counted in more time steps and weigh more.

`csnn_top` adds the host ports: a write port for kernels (rotated), biases and FC
weights, an input port that takes spiking pixels of each time step and files them
into queue t of bank 0, a per-layer configuration table (channels, size, pooling,
threshold), and activity counters (cycles, events, empty columns, stalls,
forwards, masked PE updates, saturations, output and pooled events).

## Timing

Reading a queue costs one cycle per event, one per empty column and one per
stall, plus a fixed overhead of a few cycles per queue (start, drain). A sweep
costs tiles + 5 cycles. With random weights, random biases and a random input in
which 9 % of the pixels spike (from a random first time step on), one inference
of the default network takes about 57,000 cycles; that input is much denser in the
hidden layers than MNIST usually is, so this is not a throughput figure for
MNIST.

## Departures from the published description and choices made here

- The kernel, bias and FC "ROMs" are RAMs written by the host before a run.
- How the parallel units share work is not published; the channel-interleaved
  split with one broadcast event stream is a choice of this design.
- The queue layout (fixed 100-entry regions per column, two parities), the EOQ
  hold-back register and the asynchronous queue read are choices of this design.
- The convolution unit forwards from a dedicated write-back register.
- The thresholding unit writes MemPot back in its fourth stage (as one of the two
  published stage descriptions says; the other places it in the fifth) and
  computes the pooled address in its first stage.
- MemPot is cleared by a sweep of the thresholding unit; the pipeline is drained
  between input channels so the kernel can change safely.
- The pooled map of a 28x28 input is taken as 10x10 (partial windows pooled).
- The classifier's internals are not published: it sums weights over all events
  and time steps, has no bias, and takes the arg-max.
- Not included: the conversion of integer input frames to spikes by a set of
  increasing thresholds (the published description leaves open how thresholds map
  to time steps); the host passes binary spikes per time step instead.
- The default is the 8-bit datapath. A 16-bit variant needs `DATA_W = 16` in
  `csnn_pkg` (not simulated); other degrees of parallelism need `N_UNITS`.

## Files and simulation

`rtl/csnn_pkg.sv` holds every size and shared type; the other files in `rtl/`
hold one module each. Every module has a self-checking testbench in `tb/`
(`tb_<module>.sv`) that compares against an independent behavioural reference and
prints `TB_RESULT checks=N failures=M`:

- `tb_conv_unit`: random and border event streams against a 2D sliding-window
  reference, one-event-per-clock for hazard-free streams, stall and forwarding
  occurrence, the address and permutation examples of the interlacing scheme.
- `tb_thresh_unit`: bias, firing, spike-bit write-back, pooling, clear sweep,
  sweep length.
- `tb_aeq`: ordering, empty columns, cycle count under random stalls.
- `tb_csnn_unit`, `tb_csnn_ctrl`, `tb_mempot`, `tb_kernel_rom`, `tb_bias_rom`,
  `tb_class_unit`.
- `tb_csnn_top`: the full default network end to end against a frame-based
  reference (class scores, class, events per layer, pooled events), the cycle
  identity of queue reading, and a count of every mechanism (stall, forward,
  empty column, border masking, saturation, pooling, re-firing, idle units); a
  mechanism that never occurred counts as a failure. It runs at the default
  parameters in a few seconds.

With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/csnn_pkg.sv rtl/mempot.sv \
  rtl/conv_unit.sv rtl/thresh_unit.sv rtl/aeq.sv rtl/kernel_rom.sv \
  rtl/bias_rom.sv rtl/class_unit.sv rtl/csnn_unit.sv rtl/csnn_ctrl.sv \
  rtl/csnn_top.sv tb/tb_csnn_top.sv --top-module tb_csnn_top
./obj_dir/Vtb_csnn_top
```

For a single block, list the package, the block's file and the files of the
modules it instantiates.
