# Mensa-G: three specialised accelerators for edge neural-network inference

Edge neural-network models are very uneven. Inside a single model, some layers do
hundreds of millions of multiply-accumulates on a few kilobytes of weights. Others
(LSTM gates, fully-connected layers) touch megabytes of weights and use each weight
once per input. One large PE array with one dataflow and big buffers, the usual edge
accelerator, runs the first kind well. On the second kind it sits idle waiting for
DRAM. Mensa replaces that single array with a few small accelerators. Each one is
sized and given a dataflow for one *family* of layers. A runtime assigns every layer
to one of them.

This repository holds synthesizable SystemVerilog for **Mensa-G**, the Mensa
configuration built for Google's edge models, as described by Boroumand et al.
("Google Neural Network Models for Edge Devices: Analyzing and Mitigating Machine
Learning Inference Bottlenecks", PACT 2021). It is an independent implementation, not
the authors' code. The published description gives the array sizes, buffer capacities,
dataflows and placement of the three accelerators. Everything else is filled in here:
widths, buffer layouts, control, handshakes and the gather network. Each such choice is
marked below and at the top of the file concerned.

## The three accelerators

| accelerator | module | layer families | PE array | on-chip storage | placement |
|---|---|---|---|---|---|
| Pascal | `pascal_accel` | 1, 2: convolutions with high MAC intensity and small weights (1-500 kB) | 32 x 32 | 128 kB parameter buffer, 256 kB activation buffer | CPU die |
| Pavlov | `pavlov_accel` | 3: LSTM gates and fully-connected layers (0.9-18 MB of weights, about 1 FLOP/B) | 8 x 8 | no parameter buffer, 512 B of weight registers per PE, 128 kB activation buffer | logic layer of 3D-stacked DRAM |
| Jacquard | `jacquard_accel` | 4, 5: deep convolutions with large weights, depthwise convolutions | 16 x 16 | 128 kB parameter buffer, 128 kB activation buffer | logic layer of 3D-stacked DRAM |

Every PE does one 8-bit multiply-accumulate per cycle. At 1 GHz this gives the
published peaks: 2 TFLOP/s, 128 GFLOP/s and 512 GFLOP/s. The clock frequency is
inferred from those numbers; the source does not state it. The accelerators share
nothing, and only one layer runs at a time. `mensa_top` holds the three accelerators
and a small dispatcher.

Operands are signed int8, since the models are fully 8-bit quantized. Sums are 32-bit
(`mensa_pkg::acc_t`). The outputs are raw 32-bit sums. Activation functions and
requantisation are not part of these accelerators.

## Dataflows

These three loop nests are the core of the design. In each one, one operand stays in
the PEs and is reused over time ("temporal multicast"). Another is sent to many PEs at
once ("spatial multicast"). The design then decides where each sum is reduced: inside
one PE over time, or across PEs.

### Pascal: weight broadcast, output stays in the PE

Take a pointwise layer with `K` input channels: `O[i][j] = sum_k I[i][j][k] * W[k]`.
PE `(i,j)` owns output pixel `(i,j)` of a 32 x 32 tile. In each cycle the controller
reads one weight `W[k]` and sends it to all 1024 PEs. Each PE multiplies it by its own
activation `I[i][j][k]` and adds the product into its register file. After `K` cycles
every PE holds a finished output. No partial sum ever crosses the array. This matters
because partial-sum traffic is what saturates the network of a monolithic array on
these layers.

This implementation adds one level to the published loop (a design choice). Each PE
has `RF_DEPTH` (8) accumulators, one per filter. For each channel `k`, the
activation-buffer word is read once, latched in the PE and reused for `n_filt`
consecutive weights `W[f][k]`:

```
for tile in 0..n_tiles-1
  for k in 0..k_len-1            // activation word act_base + tile*k_len + k, read once
    for f in 0..n_filt-1         // weight byte par_base + f*k_len + k, broadcast
      all PEs p: acc[p][f] += I[tile][k][p] * W[f][k]
  drain: for f, for row r: out_data = acc[r*COLS .. r*COLS+COLS-1][f]   (valid/ready)
```

One activation-buffer word is 1024 bytes, one byte per PE (PE `p = i*COLS + j`). The
256 kB buffer thus holds 256 (tile, channel) words. A standard convolution runs the
same way once its windows are laid out as channels (im2col). The Edge TPU
infrastructure around Mensa performs that transform; it is not built here.

Timing per tile: `k_len*n_filt` MAC cycles with the whole array busy, 1 flush cycle,
then `32*n_filt` drain beats. The first output is valid `k_len*n_filt + 2` cycles after
`start` is sampled. The drain does not overlap the next tile.

### Pavlov: weights stay, activations broadcast, sums over time

An LSTM gate is a matrix-vector product, repeated for each input sample `t`:
`O[t][j] = sum_i I[t][i] * W[i][j]`. The weights are far too large to buffer, and an
ordinary array fetches each weight once per sample. Pavlov fetches each weight once
per layer. PE `j` owns output column `j` and keeps `W[i][j]` in its 512 weight
registers (512 B). The weights stream in straight from DRAM, one 64-byte row per beat
(`w_valid/w_ready`). The controller then broadcasts `I[t][i]` for every sample `t`
while the weight row `i` stays put:

```
for i in 0..n_rows-1             // waits (w_stall) until weight row i has arrived
  for t in 0..n_samples-1        // activation byte act_base + i*n_samples + t, broadcast
    all PEs j: psum[j][t] += I[t][i] * W[i][j]
drain: for t: out_data = psum[0..63][t]                      (valid/ready)
```

Each command covers one tile of 64 output columns, up to 512 rows and up to
`PSUM_DEPTH` (64) samples. The weight stream runs concurrently with the computation.
The row loop stalls only when row `i` has not arrived yet, so DRAM latency hides behind
the `n_samples` cycles spent on each row. In an LSTM layer, the input MVMs of all cells
can run back to back, followed by the hidden MVMs. That ordering is the driver's
choice of command sequence. The gate non-linearities and the cell-state update are not
part of Pavlov.

Timing with a weight beat every cycle: `n_rows*n_samples` MAC cycles starting one cycle
after `start`, then 1 flush cycle and `n_samples` drain beats.

*Partial-sum indexing.* The published text says each PE stores "C partial sums, one
per cell". Its dataflow figure shows each PE producing `O[t][j]` for successive
samples `t` with a fixed weight. This RTL follows the figure.

### Jacquard: weights stay, partial sums gathered across the array

Jacquard targets layers with low-to-moderate weight reuse and almost no activation
reuse, such as depthwise convolutions. Its weights also stay in PE registers and are
reused over many inputs. Unlike Pascal and Pavlov, every PE contributes a partial sum
to the *same* output, and a gather network adds them up. The published figure shows
one input item feeding all PEs and all PEs producing a partial sum of the same output.
This implementation reads that item as one input vector `I[t]` (for example an im2col
window) spread over the array, with element `p` going to PE `p`. Each output is a dot
product with one of the stationary weight vectors:

```
load: for f in 0..n_filt-1: PE p weight register f <- parameter word par_base + f, byte p
for t in 0..n_vec-1                // activation word act_base + t, read once
  for f in 0..n_filt-1
    PE p: psum[p] = I[t][p] * W[f][p]
    out = sum over the 256 PEs of psum[p]          (jacquard_reduce)
```

`jacquard_reduce` is a pipelined binary adder tree with 8 levels for 256 PEs. It
produces one output activation per cycle, so all 256 PEs do one MAC every cycle. Up to
`JW_DEPTH` (16) weight vectors are held per pass. The output has a valid/ready
handshake. When it is stalled, the whole pipeline (buffer read, PE products, tree)
holds.

Timing: `n_filt` load cycles, then `n_vec*n_filt` outputs on consecutive cycles. The
first output comes `n_filt + log2(256) + 3` cycles after `start`.

Parameter prefetch: once its weight vectors are in the PE registers, a pass no longer
reads the parameter buffer. The output `pbuf_free` is high whenever the load phase is
not running, and the parameter buffer may then be written, including during
computation. The parameters of the next pass can therefore be fetched from DRAM while
the current one computes, which hides the fetch as the source intends. The
activation buffer is read throughout a pass and is filled only while the accelerator
is idle.

## Running a model: dispatch and communication

A software runtime (not hardware, not included) maps each layer to an accelerator in
two phases:

1. Choose the best accelerator for each layer alone.
2. Keep a layer on the previous layer's accelerator unless moving it pays off. A layer
   moves only when its MACs exceed twice the previous accelerator's compute, or when
   the weights to fetch outweigh the activations to move and reuse is below 64 FLOP/B.

`mensa_top` executes the result. It accepts one command at a time
(`cmd_valid/cmd_ready`), and `cmd_ready` stays low while any accelerator is busy. A
command names the accelerator (`cmd_accel`) and carries a layer descriptor, one struct
per accelerator in `mensa_pkg`. The selected accelerator starts one cycle after the
command is accepted, and `layer_done` pulses when it delivers its last output.
Activations pass between accelerators through DRAM. For that reason every buffer-fill
port, the Pavlov weight stream and the three output streams are ports of `mensa_top`;
DRAM and any DMA engine sit outside. The buffers may be written only while their
accelerator is idle, except Jacquard's parameter buffer, which may be written whenever
`jq_pbuf_free` is high. Assertions check both rules. `accel_switches` counts the layers
that ran on a different accelerator than the layer before. Each such switch implies
one activation hand-over through memory.

| descriptor | fields |
|---|---|
| `pascal_cfg_t` | `k_len` (>= 1), `n_filt` (1..8), `n_tiles` (>= 1), `act_base` (word), `par_base` (byte) |
| `pavlov_cfg_t` | `n_rows` (1..512), `n_samples` (1..64), `act_base` (byte) |
| `jacquard_cfg_t` | `n_filt` (1..16), `n_vec` (>= 1), `act_base` (word), `par_base` (word) |

## What the layer families need from this hardware

The family ranges are the published ones. Whole-model sizes were not published.

* Family 1 (1-100 kB of weights) and family 5 (1-100 kB) fit their 128 kB parameter
  buffers whole.
* Family 2 (100-500 kB) on Pascal and family 4 (0.5-2.5 MB) on Jacquard do not. They
  run as several commands, with the buffer refilled between them.
* Family 3 (0.9-18 MB) is never buffered. One Pavlov command consumes 32 kB of weights
  (512 rows x 64 columns).
* Dot products longer than 256 on Jacquard, and more than 8 filters on Pascal, also
  take several commands. Adding partial outputs across commands happens outside these
  blocks.
* Depthwise convolution (family 5) maps poorly onto the input-vector reading of
  Jacquard's dataflow. A 3x3 depthwise output uses only 9 elements of a 256-element
  dot product. Packing the windows of 16 channels into one vector, with one weight
  vector per channel, gives 9 useful MACs per cycle out of 256.

`tb_layer_families` runs one layer of each family on the full-size design, with sizes
chosen for the test:

| family | accelerator | layer | MACs | busy cycles |
|---|---|---|---|---|
| 1/2 | Pascal | 3x3 conv, 3 in channels, 8 filters, 32x32 outputs (im2col, K = 27) | 221,184 | 473 (216 of them MAC) |
| 3 | Pavlov | LSTM input MVM, 128 inputs, 16 cells x 4 gates, 16 steps | 131,072 | 2066 |
| 4 | Jacquard | 768-long dot products in 3 passes, 16 filters, 8 positions | 98,304 | 3 x 154 |
| 5 | Jacquard | 3x3 depthwise, 16 channels packed in one vector, 4x4 outputs | 2,304 useful | 282 |

## Where this RTL goes beyond, or departs from, the published description

Given by the source: the three array sizes, the buffer capacities, the 512 B of weight
registers per Pavlov PE, the absence of a Pavlov parameter buffer, the three dataflows
(multicast operand, stationary operand, where reduction happens), placement near
memory, no resource sharing, and no concurrent layers.

Chosen here:

* signed int8 operands and 32-bit sums;
* per-PE register depths: 8 accumulators for Pascal, 64 partial sums for Pavlov, 16
  weight vectors for Jacquard;
* buffer word widths and data layouts;
* the filter loop that reuses an activation across filters in Pascal and Jacquard;
* the overlap of Pavlov's weight stream with its computation;
* the `pbuf_free` rule for Jacquard's parameter prefetch;
* the adder-tree gather network;
* the start/busy/done and valid/ready handshakes;
* asynchronous active-low reset of control state only (datapath registers are not
  reset);
* the dispatcher's command format.

The Jacquard input-vector reading of the dataflow figure is an interpretation; see
above. Drain and compute do not overlap in Pascal or Pavlov. The source states that Jacquard hides DRAM latency behind computation. Here, Pavlov's weight stream and Jacquard's parameter prefetch overlap computation. Pascal's buffers and Jacquard's activation buffer are refilled between commands, while the accelerator is idle. There is no activation function or requantisation after the 32-bit sums. The buffers are
behavioural arrays; a real chip would use SRAM macros.

Not built:

* the software scheduler;
* the host CPU;
* the HBM stack and its interface;
* the data-transform hardware (im2col) and activation-function units kept from the
  Edge TPU;
* any DMA engine.

## Files

* `rtl/mensa_pkg.sv`: widths, `accel_e`, the three descriptor structs.
* `rtl/sram_buffer.sv`: single-port synchronous buffer (1-cycle read, output holds).
* `rtl/pascal_pe.sv`, `rtl/pascal_accel.sv`: Pascal.
* `rtl/pavlov_pe.sv`, `rtl/pavlov_accel.sv`: Pavlov.
* `rtl/jacquard_pe.sv`, `rtl/jacquard_reduce.sv`, `rtl/jacquard_accel.sv`: Jacquard.
* `rtl/mensa_top.sv`: the three accelerators and the dispatcher.
* `tb/tb_<module>.sv`: one self-checking testbench per module.
* `tb/tb_layer_families.sv`: one representative layer per family on the full-size design.

## Simulation

Every testbench generates random int8 data, computes the expected sums itself and ends
by printing `TB_RESULT checks=N failures=M`. The unit testbenches use small arrays
(for example 4 x 4 Pascal, 8-PE Pavlov and Jacquard) to stay fast. They also check the
cycle counts given above, which confirms one MAC per PE per cycle, and they exercise
output backpressure and the Pavlov weight-wait stall.

`tb_mensa_top` runs the full-size design (all parameters at their defaults) and takes
under a minute. It sends six layers back to back in the order Pascal, Jacquard,
Pavlov, Pavlov, Pascal, Jacquard. Meanwhile it streams Pavlov weights with gaps, writes
the last Jacquard layer's parameters while the first Jacquard layer computes, and stalls
all outputs at random. It checks every output value. It also checks that each mechanism
occurred: command hold-off, weight wait, parameter prefetch, backpressure on each
accelerator, and exactly four accelerator switches.

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/mensa_pkg.sv tb/tb_mensa_top.sv --top-module tb_mensa_top -Mdir obj -o sim
./obj/sim
```

Replace `tb_mensa_top` with any other testbench name to run it. Uninitialised
datapath state is harmless: every accumulator is cleared by its first product.
