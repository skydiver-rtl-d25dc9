# Skydiver: a convolutional spiking-network accelerator with channel-balanced work

In a spiking neural network (SNN) a neuron only does work when one of its
inputs fires, and most neurons are silent in most timesteps. An accelerator
that skips the silent inputs saves most of the arithmetic, but the work that
remains is lopsided: some input channels fire a hundred times more than
others. If each processing element owns a fixed set of channels, the one with
the busiest channels sets the pace and the rest sit idle.

Skydiver's answer has two parts:

* **Make the work predictable.** With stride 1 and R-1 rows and columns of
  zero padding around every input channel (a "full" convolution), every
  weight of a filter meets every input spike. The total membrane update of an
  output channel is then exactly *(sum of the filter's weights) x (number of
  input spikes)*, so the number of spikes an output channel will produce is
  roughly proportional to its filter's weight sum. That sum is known offline.
* **Balance the work offline.** The input channels of the next layer are
  those output channels, so their expected spike counts are known before
  running. A simple offline schedule (below) deals the channels out to the N
  channel processing elements so that each gets about the same share.

This repository holds SystemVerilog for the accelerator: a layer engine that
runs one convolutional SNN layer for one timestep per job, with a channel
table per processing element that the offline schedule fills in.

## What one job computes

For output channel k and output neuron (x, y), with input spike maps
S[c][a][b] (0 or 1), R x R weights w and bias b:

```
z[k][x][y] = b[k] + sum over c, jj, kk of  w[k][c][jj][kk] * S[c][x - pad + jj][y - pad + kk]
V[k][x][y] = V + z                      (V read as 0 in the first timestep)
spike      = V > Vth                    (strictly greater)
V          = V - Vth  if it spiked      (reset by subtraction)
```

Positions outside the input map count as zero. The output map is
E_rows x E_cols with E = H + 2*pad - R + 1. The padding is a layer setting:
R-1 (the default, 2 for 3x3 kernels) gives the balanced "full" convolution
described above, 1 gives a same-size convolution, and 0 a valid convolution.

The engine works backwards from the spikes. An input spike at (a, b) in
channel c touches the R*R output neurons x = a + pad - jj, y = b + pad - kk,
each with one weight. Silent neurons cost nothing apart from a short scan of
their row.

## Organisation of the array

```
                +---------------------- host word bus ----------------------+
                |                                                           |
          skydiver_ctrl  (configuration, channel tables, group sequencing,  |
                |         busy counters, status)                            |
                |                                                           |
   neuron_state_mem: input spike rows  ---->  spike_sched x (N SPEs x 4 streams)
                     output spike map  <--+        |  one command per cycle per stream:
                                          |        |  "add w[chan][jj,kk] to Psum(x,y)"
                                          |        v  (same commands to every cluster)
                                          |   spe_cluster x M  (one filter each)
                                          |     weight_bank
                                          |     channel_spe x N   -- 4 streams each:
                                          |        weight -> adder -> Psum -> FIFO
                                          |     adder_tree x 4    -- one per stream
                                          +---- vmem_update x 4   -- one per stream
```

* **Clusters (M = 8)** are filter-based: in filter group g, cluster m
  computes output channel k = g*M + m. All clusters see the same input
  spikes, so they run in lock step and differ only in the weights they
  fetch. A layer with K filters needs ceil(K/M) groups; in the last group
  clusters without a filter run but write nothing.
* **Channel-based SPEs (N = 4 per cluster)** are the unit of balance. SPE j
  handles only the input channels listed in its channel table, and produces a
  partial sum of every output neuron over those channels.
* **Streams (4 per SPE)** split the output rows into four equal bands of
  ceil(E_rows/4) rows. A stream handles every input row that can reach its
  band. An input row near a band edge is therefore read by two streams, and
  each keeps only the kernel rows that land in its own band.
* **Adder trees (4 per cluster)** add the N partial sums of the same neuron,
  one tree per stream.
* **VMEM update units (4 per cluster)** hold the membrane potentials of
  their band for every filter the cluster serves. They apply the neuron model
  and write the output spike.

The spike scheduler of (SPE j, stream s) is shared by all M clusters, so
there are N x 4 = 16 schedulers and M x N x 4 = 128 accumulating streams.

## Life of a filter group

1. **Accumulate.** Each scheduler walks its SPE's channel list. For every
   input row that reaches its band, it reads the 160-bit row in one cycle,
   gets the data the next cycle, and then takes the set bits from the lowest
   column up. Each spike takes R*R = 9 cycles, one per kernel element. Each
   cycle carries a command {chan, r = jj*R+kk, xl, y}. A command whose row
   falls outside the band, or whose column falls outside the map, is marked
   invalid and costs its cycle anyway. The weight bank returns the weight one
   cycle later. The stream then adds it to its Psum word as a one-cycle
   read-modify-write, so two commands in a row for the same neuron need no
   forwarding.
2. **Drain.** When its scheduler is done, a stream walks its band in raster
   order (row, then column). It pushes each Psum into its 8-entry FIFO and
   clears the word. This is where balance shows: the SPE with the least work
   fills its FIFO early and then stalls, because the adder tree pops only
   when all N FIFOs of the stream hold a value. The group ends when the SPE
   with the most work has drained.
3. **Update.** Each popped sum goes, one cycle later, into the VMEM unit of
   its stream. The unit counts positions in the same raster order, adds the
   filter's bias, applies the threshold and subtraction, writes VMEM back
   and writes the spike bit into the output spike map.

The controller starts the next group when every scheduler is done and every
cluster reports `fin`. The job ends after the last group; `irq` pulses.

The time of one group is about max over SPEs of (its accumulate time) plus the
drain of one band (ceil(E/4) x E_cols cycles). The accumulate time of one
stream is 1 cycle per channel, plus 3 cycles per input row it scans, plus 9
cycles per spike. The testbench checks this exact count.

## Channel-balanced schedule (offline)

The host computes the channel tables before it runs a layer. For each input
channel it takes a workload estimate: the weight sum of the filter that
produced that channel in the previous layer. It then:

1. sorts the estimates in descending order;
2. cuts the list into pieces of N. Even pieces keep descending order and odd
   pieces are reversed, so neighbouring pieces run in opposite directions;
3. deals element j of every piece to SPE j. This gives N lists with roughly
   equal sums;
4. repeats, for a bounded number of iterations: take the SPEs with the
   largest and the smallest sum. If half their difference is larger than the
   smallest element of the largest list, move that element to the smallest
   list. Otherwise stop.

The published pseudo-code for step 2 sorts both kinds of piece descending,
but its prose says adjacent pieces take opposite orders. This code follows
the prose. The schedule is software: `tb/tb_cbws_workload.sv` contains it as
an SV function (`cbws`) that you can reuse.

The hardware only needs the result: per SPE j, a count (config word 16+j) and
a list of channel numbers (region 3). Any assignment works. An SPE may have
no channels at all; its streams then drain zeros.

## Host interface

The top has a simple word bus in place of the DMA engine of a real system.
There is one write per cycle (`host_we`, `host_waddr`, `host_wdata`) and one
read (`host_raddr`, with `host_rdata` valid on the next cycle). Bits [31:28]
of the address select a region:

| region | use | address fields | data |
|---|---|---|---|
| 0 | configuration | 0 C, 1 K, 2 H rows, 3 W cols, 4 pad, 5 Vth, 6 first, 7 start, 16+j channel count of SPE j | value |
| 1 | weight | k [19:12], c [11:4], r = jj*R+kk [3:0] | signed 8-bit |
| 2 | bias | k [7:0] | signed 24-bit |
| 3 | channel table | j [15:8], index [7:0] | channel |
| 4 | input spikes | c [23:16], row [15:4], chunk [3:0] | columns 32*chunk .. +31 |
| 5 | status (read) | 0: {busy, done}; 1: job cycles; 2+j: busy cycles of SPE j | |
| 6 | output spikes (read) | k [23:16], row [15:4], chunk [3:0] | 32 output columns |

After reset the accelerator spends BAND_MAX x EW_MAX = 3402 cycles zeroing its
Psum memories, with `busy` high. Wait for `busy` to fall before the first job.
A timestep of a layer is then:

1. write the input spike chunks;
2. write `first` (1 for the first timestep of the layer, 0 after it);
3. write `start`;
4. wait for `irq`;
5. read the output spikes.

Configuration, weights, biases and channel tables stay in place until they
are overwritten. Write them only while the accelerator is idle. Multi-layer
networks and timesteps are sequenced by the host. VMEM holds one layer, so
the host runs all timesteps of a layer before it moves on, and keeps the
spike trains between layers.

The balance ratio of a job is mean(SPE busy) / max(SPE busy), from region 5.
The SPE busy count adds up the cycles in which each of the SPE's four
scheduler streams was busy.

## Sizes and parameters

All sizes are package parameters in `rtl/skydiver_pkg.sv`:

| parameter | default | meaning |
|---|---|---|
| M_CLUSTERS | 8 | filter-based clusters |
| N_SPE | 4 | channel-based SPEs per cluster |
| N_STREAMS | 4 | streams per SPE (fixed by the architecture) |
| R | 3 | kernel size |
| C_MAX, K_MAX | 32, 32 | input / output channels of a layer |
| H_MAX, W_MAX | 80, 160 | input rows / columns |
| WBITS, PSUM_BITS, VBITS | 8, 18, 24 | weight, partial sum and potential widths |

The limits were chosen to fit the two evaluated networks. One is an MNIST
classifier with 3x3 convolutions 16c-32c-8c on 28x28 images. The other is a
road-segmentation network on 160x80x3 frames with 8, 16, 32, 32, 16 and 1
channels. With padding R-1 each layer's output is 2 rows and 2 columns larger
than its input, so for the 160x80 network the host must crop the border
before the next layer. The classifier's final fully connected layer is not a
convolution and cannot run on this engine.

The potential saturates at the VBITS limits instead of wrapping. The partial
sums are wide enough for 32 channels x 9 weights of magnitude 128.

Memory at the defaults, as plain arrays (the tools map them to RAM):

* input spikes: 32 x 80 rows x 160 bits;
* output spikes: 32 x 82 rows x 162 bits;
* Psum: 128 streams x 3402 x 18 bits;
* VMEM: 32 banks x 13608 x 24 bits;
* weights: 8 banks x 1152 x 8 bits.

The input spike memory has 16 read ports and each weight bank has 16. On an
FPGA that means replicated copies.

## How far this follows the published design

These parts follow the published description:

* the split into controller, neuron state memory, VMEM memory, weight memory
  and spike scheduler;
* filter-based clusters of channel-based SPEs, each cluster with its own
  weight bank;
* four streams per SPE on equal row bands;
* a Psum and a FIFO per stream, and one adder tree per stream collecting
  that stream from all SPEs;
* stride 1 and R-1 zero padding;
* the neuron model with reset by subtraction and a strict threshold;
* the offline channel schedule.

These are this design's own choices, because the description does not go
that deep:

* **The spike scheduler's internals.** The original design refers to earlier
  work for them. Here they are the row scan and lowest-bit search above.
* **M and N.** The description never gives them. 8 and 4 are choices.
* **Where Vmem enters.** The published SPE diagram shows Vmem as an input to
  each stream, next to the weight, ahead of the adder. Here the stream adds
  only weights, and the potential is added once, after the adder tree, in
  `vmem_update`. The sum is the same. The diagram does not say what its
  selector chooses.
* **Widths, memory organisation, the host bus, the register map**, the
  accumulate-then-drain order, the bias path and the busy counters.
* **The neuron equation.** The published equations do not quite agree with
  each other. Eq. 1 subtracts Vth after a spike. Eq. 3 writes the spike
  condition as U(V - Vth*spike(t-1)). This design uses Eq. 1 and "fires when
  V exceeds Vth".

Known gaps:

* Only convolutional layers with one kernel size are supported. There is no
  fully connected layer, pooling or stride other than 1.
* Throughput is not matched to the published figures (22.6 k frames/s on
  MNIST at 200 MHz). In this engine a 16->32 channel 28x28 layer at about
  10% spike density takes 3,500 to 7,500 cycles per timestep, and loading
  spikes over the word bus takes more. The published system evidently
  processes spikes faster than one kernel element per cycle per stream, or
  at lower spike counts. The description is not detailed enough to say which.
* No timing closure at 200 MHz is claimed. The 160-bit lowest-set-bit
  search and the one-cycle Psum and VMEM read-modify-writes are the likely
  critical paths.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

* `tb_skydiver_top`: the whole accelerator at its default size, driven as a
  host. It runs the worked example of the APRC construction: two 3x3 filters
  with weight sums 2.7 and 0.9 (scaled by 10) on a 4x4 spike map with six
  spikes. The summed membrane updates must be 162 and 54, a ratio of 3. It
  runs the same map again with threshold 10 (1.0 scaled) and checks the
  output spikes against the model. The published example prints 6 and 2
  spikes for that case. Its own weights and map give 11 and 8, whichever
  way the kernel is oriented, so only the sums are taken from it. It
  then runs random layers with padding 2, 1 and 0 over several timesteps and
  compares every output spike with a behavioural model. It also checks that
  each of these happened at least once: a FIFO stall, a second filter group,
  an idle cluster, fired spikes, potential carried across timesteps, a
  band-edge command that was dropped, and an SPE with an empty channel list.
* `tb_cbws_workload`: layers shaped like the two networks' layers, with
  input channels firing at rates skewed in proportion to a per-channel
  magnitude. Each runs once with contiguous channel blocks and once with the
  balanced schedule, and both outputs are checked. Over six layers the mean
  balance ratio rose from 77% to 91% and the total job time fell by a factor
  of 1.16. The published figures are 79.6% to 94.1% and 1.2x on the
  classifier. Single layers vary with the random rates; one of the six was
  3% slower with the schedule.
* `tb_seg_network`: the six listed convolutional layers of the segmentation
  network at full 80x160 size, chained. Each layer runs two timesteps and
  feeds its centre-cropped output spikes to the next layer. The expected
  rate of each input channel is taken from the weight sum of the filter that
  produced it, as the offline schedule intends. Every layer runs once with
  contiguous channel blocks and once with the balanced schedule, and the two
  runs' output spikes must be identical. The threshold of each layer is set
  from its measured input rate. The weights are random with a
  filter-specific mean, since trained weights are not available.
  * Result in one run: mean balance ratio 66.9% with contiguous blocks and
    80.5% with the balanced schedule. Layers 3 to 6 reached 81 to 98%, and
    the whole network ran 1.17x faster.
  * Layers 1 and 2 gain nothing. Layer 1 has three equal-rate input
    channels, and layer 2's input is very sparse, so the fixed per-row scan
    cost dominates.
  * The published per-layer plot shows 13 layers for this network, while
    its layer list has six convolutions, so the two are not compared layer
    by layer.
* `tb_aprc_workload`: the padding argument itself. A 16->32 channel 28x28
  layer runs for eight timesteps with padding 2 and again with padding 0.
  Input spikes are denser near the border, and every output spike is
  compared with a model that keeps potentials across timesteps. With
  padding 2 the summed first-timestep update of every output channel, read
  back from VMEM, equals the sum over input channels of kernel weight sum x
  input spikes exactly. With padding 0 that identity fails for all 32
  filters. Over the eight timesteps, the correlation between an output
  channel's spike count and its filter's weight sum was 0.95 with padding 2.
  With padding 0 it was 0.97, so this synthetic case does not show the
  spike-count improvement the published network measurements show. The
  exact identity holds, but thresholding blurs it about equally in both cases.
* Unit testbenches for the scheduler, with exact command sequence and cycle
  count, and for the SPE streams, the cluster, the VMEM update with
  saturation, the adder tree, the FIFO, the memories and the controller.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/skydiver_pkg.sv \
          tb/tb_skydiver_top.sv --top-module tb_skydiver_top -Mdir obj
obj/Vtb_skydiver_top
```

Replace `tb_skydiver_top` with any other testbench name. Files are found by
module name through `-Irtl -Itb`. The full-size end-to-end test runs in a few
seconds.

To change the array shape or the limits, edit the parameters in
`skydiver_pkg`. M_CLUSTERS should divide K_MAX, and R*R must fit in the 4-bit
kernel-position field of the address map. The testbenches read the sizes
from the package.
