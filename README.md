# A sparsity-aware streaming SNN accelerator for modulation classification

This RTL implements a five-layer spiking neural network (SNN) that sorts
radio I/Q frames into 11 modulation classes. It is a *streaming*
accelerator: every layer of the network is its own piece of hardware with its
own weights and neuron state, and the layers pass spike rows straight to each
other through FIFOs. A new timestep can enter the first layer while later
layers are still busy with earlier ones.

Streaming designs usually treat every weight and every input the same way,
because skipping work per data path needs control logic and unbalances the
pipeline. This design still skips work, on both sides:

* **Zero weights** (*spatial sparsity*). A convolution layer stores only its
  non-zero weights, and each timestep it walks through that list once.
* **Zero inputs** (*temporal sparsity*). A weight is added to an output
  pixel only when the input spike under it is 1.

The weights are fixed during inference, so the number of steps a layer needs
per timestep is known in advance. It is loaded as a register, and the layer
never decodes anything at run time. Because the output channels leave in a
fixed order, the next layer can consume them with no handshake beyond
valid/ready.

## The network

| layer | operation | weights | output per timestep |
|-------|-----------|---------|---------------------|
| input | I row, then Q row | – | 2 rows × 128 spikes |
| Conv1 | 2 → 16 channels, kernel 1×11, LIF | 352 | 16 rows × 128 |
| Conv2 | 16 → 32 channels, kernel 1×11, LIF, max pool 2 | 5632 | 32 rows × 64 |
| Conv3 | 32 → 64 channels, kernel 1×5, LIF, max pool 2 | 10240 | 64 rows × 32 |
| FC1 | 2048 → 128, LIF | 262144 | 1 row × 128 |
| FC2 | 128 → 11, LIF | 1408 | 1 row × 11 |

The convolutions use "same" padding. FC1 takes the 64 pooled rows of Conv3
in channel order: input index = channel · 32 + pixel. A frame is T timesteps
(T is a register). The I/Q samples must already be turned into spikes
(sigma-delta encoding with oversampling ratio T) before they reach this
hardware; that encoder is not part of the RTL.

## Convolution layers: one iteration per non-zero weight

### Weight storage

Each non-zero weight of a layer is one COO (coordinate-format) entry
{D, RI, CI}:

* `D` is the 16-bit weight;
* `RI = oc · IC + ic` combines its output and input channel;
* `CI` is its kernel tap, 0 … K−1.

The entries are sorted by `RI`, and so by output channel. RI and CI are as
narrow as the layer allows:

| layer | RI bits | CI bits | bits per entry |
|-------|---------|---------|----------------|
| Conv1 | 5 | 4 | 25 |
| Conv2 | 9 | 4 | 29 |
| Conv3 | 11 | 3 | 30 |

The entry memory has room for the dense count (352, 5632 or 10240 entries),
so any density up to 100 % can be loaded.

### The gated one-to-all product

Take a weight at tap `CI` of input channel `ic`. Over all output pixels `oi`
it meets the padded input row `ic` at position `oi + CI`. One iteration
therefore handles *all* OI output pixels of the current output channel at
once:

    acc[oi] += (row[ic][oi + CI] == 1) ? D : 0      for every oi

The window `row[ic][CI .. CI+OI-1]` is the weight's *enable map*
(`goap_accum`). The layer fetches each weight once per timestep instead of
once per window position, and it adds only where an input spike is present.
The amount of work per iteration is always OI lanes, whatever the spikes, so
the lanes stay balanced.

### Iteration kinds and REPS

The layer holds the current output channel `oc` and its partial sums `acc`.
It reads the input channels from its stream, one per iteration, into a padded
input buffer. Every iteration is one of the following kinds
(`saocds_conv_layer`):

* **compute**: the next weight's input channel has been read. At the
  channel's first weight, oc's potentials are loaded from the state memory
  and decayed. The weight is then accumulated. At oc's last weight the layer
  fires the spikes, sends the row and stores the state, and oc advances.
* **empty**: the next weight needs an input channel that has not been read
  yet. The iteration only reads input. This can happen only while the first
  output channel is in progress: by the time the second one starts, every
  input channel has been read.
* **extra**: output channel oc has no non-zero weight at all. It is still
  loaded, decayed, fired, stored and sent, so the next layer sees every
  channel and the neuron state of oc keeps decaying.
* **drain**: all output channels are done but input channels remain. The
  iteration only reads input. This kind occurs only in unusual patterns.

The number of iterations per timestep, **REPS**, depends only on the weight
pattern. It equals NNZ + the extra and empty iterations. The host computes it
when it loads the weights, by walking the loop above once (`plan_reps` in
`tb/saocds_tb_pkg.sv` is a reference implementation). Extra and empty
iterations are few. In the full-size random runs (densities 5 % to 100 %)
they number 1 to 27 per layer and timestep; the most were Conv3 at 5 %
(2 extra and 25 empty among 511 iterations).

After REPS iterations the layer has read IC rows and written OC rows, and it
begins the next timestep. An iteration waits only for a missing input row or
for an output row that has not been taken, so a layer with free-flowing
streams spends exactly REPS cycles per timestep.

## Fully-connected layers: weight mask

FC weights are stored dense. Each weight has a mask bit that is 1 when the
weight is non-zero, and the bit is set when the weight is written. For each
SIMD-wide chunk of input spikes and each group of PE neurons, the layer
(`wm_fc_layer`) does the following:

1. It ANDs the input spikes with the mask bits, giving the *fetch mask*.
2. It reads and sums only the weights the fetch mask selects, so a weight
   is fetched only if it is non-zero and its input spiked.

The saving is in fetches and additions, not in time. The number of cycles is
fixed: (N_IN/IN_BEAT) · (1 + (IN_BEAT/SIMD) · (N_OUT/PE)) + 1 per timestep.

| layer | PE | SIMD | cycles per timestep |
|-------|----|------|---------------------|
| FC1 | 8 | 32 | 1089 |
| FC2 | 11 | 32 | 6 |

## Neurons

Every neuron (each output channel × pixel in a convolution layer, each
output of an FC layer) has its own decay factor α, soft-reset amount θ and
threshold U_th. Once per timestep it computes:

    U_t = α·U_{t-1} − θ·S_{t-1} + Σ W·I
    S_t = U_t > U_th

Number formats:

* Weights are 16-bit two's complement.
* U, θ and U_th are 24-bit two's complement. U wraps on overflow, so the
  order of additions never matters.
* α is unsigned Q1.15 (0x8000 = 1.0).
* α·U is rounded down: `(U·α) >>> 15`.

At t = 0 of a frame the previous U and S count as 0, which resets every
layer at frame boundaries without a separate reset pass. The spike bit S is
stored with U, and θ is subtracted at the next load, as the equation above
reads.

## Configuration

Everything is loaded through one write-only bus, `cfg` (type `cfg_t` in
`saocds_pkg`). A word is written in each clock cycle while `cfg.valid` is
high:

| field | meaning |
|-------|---------|
| `layer` | 0–2 = Conv1–Conv3, 3 = FC1, 4 = FC2 |
| `target` | `CFG_REG`, `CFG_WEIGHT` or `CFG_PARAM` |
| `addr` | see below |
| `data` | 64 bits |

* **Conv weights**
  * addr = entry number 0 … NNZ−1, in output-channel order.
  * data = {CI[39:32], RI[31:16], D[15:0]}.
* **FC weights**
  * addr = neuron · N_IN + input.
  * data[15:0] = W. Zeros must be written too: the memories are not cleared.
* **Neuron parameters**
  * addr = oc · OI + pixel for a convolution layer, or the neuron number for
    an FC layer.
  * data = {α[63:48], θ[47:24], U_th[23:0]}.
* **Registers**
  * addr 0 = NNZ, 1 = REPS, 2 = T. FC layers only have T.
  * A convolution layer stays idle while REPS = 0, so write REPS last.

## Timing and throughput

* Every block is single-cycle: memories are read combinationally and one
  iteration completes per clock.
* The layers run concurrently. Each inter-layer FIFO holds one timestep of
  its producer's rows (16, 32 and 64 rows; 2 after FC1), so a layer can
  finish timestep t+1 while the next layer is still on t.
* In steady state one timestep leaves every max(REPS1, REPS2, REPS3, 1089)
  cycles.

Conv3 has the most weights and sets the pace down to about 11 % density,
below which FC1's fixed 1089 cycles take over:

| weight densities | REPS Conv1/2/3 | measured cycles per timestep |
|------------------|----------------|------------------------------|
| 100 % | 331 / 5119 / 9905 | 9904 (Conv3) |
| 50 % | 162 / 2563 / 4843 | 4843 (Conv3) |
| 25-20-15-20-25 % | 80 / 992 / 1480 | 1480 (Conv3) |
| 15 % | 40 / 824 / 1478 | 1478 (Conv3) |
| 10 % | 38 / 525 / 1040 | 1089 (FC1) |
| 20-15-10-15-20 % | 72 / 776 / 964 | 1088 (FC1) |
| 5 % | 25 / 261 / 511 | 1089 (FC1) |

These are from the random patterns of `tb_saocds_top`, where a few output
channels are emptied on purpose, so 100 % is slightly below 10240 non-zero
weights. Each FIFO must hold a whole timestep: with 2-row FIFOs the
25-20-15-20-25 case took about 2390 cycles (REPS2 + REPS3), because Conv2
could not run ahead of Conv3.

Latency therefore falls almost in proportion to density and then levels off
at the FC1 floor. The published measurements show the same trend, with the
floor at about 14 % of the dense latency (1089/10240 ≈ 10.6 % here).

## Where this RTL departs from the published design, or fills gaps

* **Single-cycle datapath.** The original was written in high-level
  synthesis and pipelined. This RTL does a whole iteration in one cycle: a
  memory read, a decay multiply and a 24-bit add on 128 lanes. The resulting
  clock will be much slower than the published 137 MHz.
* **Throughput.** The published throughput (23.5 MS/s) and latencies cannot
  be derived from this cycle model without the number of timesteps and the
  clock. Only the trend across densities is checked.
* **Own choices.** The following were not specified and are choices of this
  design:
  * the widths of U, θ, U_th and α, and the rounding of α·U;
  * "same" padding, pool size and stride 2, and the FC1 input order;
  * the PE and SIMD counts of the FC layers;
  * the FIFO depths;
  * the configuration bus and its address map;
  * the frame-start reset of the neuron state;
  * firing in extra iterations: the decayed potential of a channel without
    weights is compared with U_th like any other channel.
* **Soft reset.** The text describes the soft reset as happening before the
  state is stored, while the neuron equation subtracts θ·S_{t-1} in the next
  step. This RTL follows the equation. The two readings give different
  potentials whenever α < 1: α·U − θ here, against α·(U − θ).
* **Max pooling.** Max pooling of binary spikes is an OR over each pair of
  pixels.
* **Not included.** Off-chip parts are not included: the encoder that turns
  I/Q samples into spikes, and the host that computes REPS.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…`, and each has a watchdog. Most compare
against values computed independently in the testbench, such as a
sliding-window convolution, integer LIF arithmetic or a queue model of the
FIFO. Two also replay the small examples from the published description:

* `tb_goap_accum`: the 2-channel, 3-tap kernel example, giving outputs
  c, a+b, b, a+c with 6 accumulations;
* `tb_fc_weight_mem`: the four-weight example with mask 0110.

`tb_saocds_conv_layer` runs a small layer (IC 3, OC 5, K 3, width 8) at
densities from 100 % down to patterns with empty channels. It checks every
output row, the extra, empty and accumulation counts, and the REPS-cycle
timestep.

`tb_saocds_top` runs the complete network at its real size. It runs 16
weight-density configurations: the per-layer mixes 25-20-15-20-25 and
20-15-10-15-20 %, and uniform 100, 90, 80, 75, 70, 60, 50, 40, 30, 25, 20,
15, 10 and 5 %. Each
configuration is 2 frames of 3 timesteps, with random input gaps and output
stalls. The testbench checks:

* every spike row leaving every layer, against a plain integer model of the
  network;
* the extra, empty and accumulation counters;
* the cycles per timestep, against max(REPS, 1089);
* the ratio of convolution accumulations to a dense sliding window, which
  follows the weight density.

It also checks that each mechanism occurred at least once: extra and empty
iterations, stream stalls, FIFO back-pressure, pooling, mask-skipped
fetches and frame restarts.

## Simulating

With Verilator 5, from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/saocds_pkg.sv tb/saocds_tb_pkg.sv tb/tb_saocds_top.sv \
        --top-module tb_saocds_top -o sim && ./obj_dir/sim

Swap in any other `tb/tb_<block>.sv` the same way. Building the top-level
testbench takes a few minutes, and running it under a minute.

## Files

| file | contents |
|------|----------|
| `rtl/saocds_pkg.sv` | widths, parameter and configuration types, LIF arithmetic |
| `rtl/saocds_top.sv` | the five-layer network |
| `rtl/saocds_conv_layer.sv` | convolution layer and its iteration controller |
| `rtl/goap_accum.sv` | enable-map gated accumulation over all output pixels |
| `rtl/conv_input_buffer.sv` | padded input rows |
| `rtl/coo_weight_mem.sv` | COO weight entries |
| `rtl/neuron_state_mem.sv` | potentials and spike bits |
| `rtl/neuron_param_mem.sv` | α, θ, U_th per neuron |
| `rtl/lif_leak.sv` | decay and soft reset |
| `rtl/lif_threshold.sv` | firing |
| `rtl/wm_fc_layer.sv` | weight-mask FC layer |
| `rtl/fc_weight_mem.sv` | dense FC weights with mask and fetch |
| `rtl/spike_maxpool.sv` | max pooling |
| `rtl/spike_fifo.sv` | inter-layer FIFO |
| `tb/saocds_tb_pkg.sv` | testbench helpers, including the REPS planner |
| `tb/tb_*.sv` | one testbench per module |
