# VQ4SNN: a spiking-network accelerator with vector-quantized weight memory

A spatial-dataflow SNN accelerator builds every layer of the network in
hardware. For each incoming spike it reads the weights of all the layer's
neurons in one wide memory access and updates every membrane potential in
the same cycle. Neuron state fits in flip-flops. The synaptic weights do not,
and on an FPGA they use up most of the block RAM.

VQ4SNN shrinks the weight store with **vector quantization**. Each weight row
holds the N weights that one input synapse contributes to the N neurons. It
is cut into vectors of `d` consecutive weights. Offline, K-means clustering
picks a codebook of `k` representative vectors, and each vector of the row is
replaced by the index of its nearest codebook entry. A row of N weights thus
becomes N/d pointers of log2(k) bits. The codebook entries keep the normal
low-bit weight format.

A single shared codebook cannot serve N/d reads per cycle. The design
therefore **interleaves** the update instead: a spike's row of pointers is
walked through over several cycles. Each cycle, one pointer per codebook port
fetches a d-weight vector, and only the matching group of d neurons
integrates. With the two ports of an FPGA block RAM, one spike costs N/(2d)
cycles instead of one. In exchange, the weight memory is several times
smaller.

This repository holds synthesizable SystemVerilog for that architecture. The
network is built at the size of its main evaluated configuration: an MNIST
classifier with 784 inputs, 128 hidden neurons and 10 outputs.
Self-checking testbenches come with it. The RTL follows the published
description of VQ4SNN (Sekertzis and Dimitrakopoulos), but it is an
independent implementation. Where that description is silent, the choices
are this design's own. They are listed in the section
"What follows the architecture and what is added".

## The network and its arithmetic

Each layer is fully connected and made of leaky integrate-and-fire (LIF)
neurons. Each layer also has **intra-layer inhibitory synapses**: every
neuron's spike is subtracted, through its own weight row, from the other
neurons of the same layer at the next time step.

Time is discrete. Within one time step, a neuron with potential V does the
following:

1. For every input spike of the step, it adds that synapse's weight. It does
   exactly one addition per active cycle.
2. For every spike its own layer emitted in the previous step, it subtracts
   that synapse's weight.
3. At the state evaluation it fires if `V > Vth`. A neuron that fired is
   reset to `V_RESET` (0). Then the leak is applied: `V = V - (V >>> LEAK_SHIFT)`,
   a decay factor that is a power of two.

Weights are two's complement and `W` bits wide. Potentials are `VW` bits
wide and **saturate** at their most positive and most negative values. Each
neuron keeps its threshold in its own register.

Default sizes (package `vq4snn_pkg`):

| item | value |
|---|---|
| network | 784 - 128 - 10, inhibitory synapses in both layers |
| layer 1 | vector quantized: d = 8, k = 2048, 2 codebook ports |
| layer 2 | uncompressed, one weight row per spike |
| weights / potentials | 5 bit / 11 bit, both layers |
| time steps per input | 25 |
| leak | `V >>> 4` (this design's choice) |

## One time step, layer by layer

Each layer has its own phase controller (`layer_ctrl`). The layers are
chained by a one-cycle **sync** pulse:

```
 in_valid&in_ready ──sync──▶ layer 1 ──sync──▶ layer 2 ──sync──▶ out_valid
                    (spikes)          (spikes)          (spikes)
```

When a layer receives sync, it copies the incoming spike vector into its
excitatory spike arbiter, and its own last output spikes into its inhibitory
arbiter. It then works through four phases:

| phase | what happens |
|---|---|
| `PH_EXCITE` | Arbiter hands out active inputs one at a time, lowest index first; each one's weights are **added** |
| `PH_INHIBIT` | Same for the layer's own spikes of the previous step; weights are **subtracted** |
| `PH_DRAIN` | Waits until the memory pipeline is empty |
| `PH_EVAL` | One cycle: threshold, reset, leak; new spikes registered |

The sync pulse follows one cycle later. The new spikes are valid in that
cycle.

Inactive inputs cost nothing, because the arbiter only offers spikes that
are present. Layer 2 starts when layer 1 is done. The next time step begins
only after layer 2 is done, so layers never work on different time steps at
the same time.

## The two-level weight memory of layer 1

```
 active synapse ─▶ pointer memory ─ row of 16 pointers (11 bit each) ─▶ MUX ─┬─ port 0 ─▶ codebook ─ 8 x 5 bit ─▶ groups 0,2,4,..
 address (0..911)   912 x 176 bit                  group counter ──────────┘ └─ port 1 ─▶ 2048 x 40 ─ 8 x 5 bit ─▶ groups 1,3,5,..
                                                        └──▶ decode ─▶ group enables (clock enables of 16 groups of 8 neurons)
```

- **Pointer memory** (`pointer_memory`). It has 912 rows: first 784 rows for
  the feedforward synapses, then 128 rows for the inhibitory ones (row
  784 + i belongs to hidden neuron i). Each row holds G = N/d = 16 pointers.
  Pointer j sits at bits `[j*11 +: 11]` and selects the weight vector for
  neurons `8j .. 8j+7`.
- **Codebook** (`vector_codebook`). It has 2048 entries of 8 weights.
  Weight `l` of an entry sits at bits `[l*5 +: 5]` and goes to neuron `8j+l`.
  There are two read ports.
- **Group sequencer** (`group_sequencer`). It holds the group counter, the
  pointer multiplexer and the group decoder. In step `s` of a row, port `p`
  reads the entry named by pointer `2s+p`. One cycle later the codebook
  outputs arrive, and exactly groups `2s` and `2s+1` are enabled. So neuron
  group g is always fed by port `g mod 2`, which is fixed wiring with no
  multiplexer at the neurons.

A weight of the original matrix is therefore
`w(row, n) = codebook[pointer[row][n / 8]][n % 8]`.

### Pipeline and cycle counts

```
cycle      c      c+1        c+2        ...  c+8        c+9
arbiter    pop A                             pop B
pointers   read A row A valid                read B     row B valid
codebook          step 0     step 1     ...  step 7     step 0 (B)
neurons                      groups 0,1 ...  groups 12,13  groups 14,15
```

The next spike's row is read during the last step of the current spike.
Spikes therefore follow each other with no bubble, at **8 cycles per spike**
(N/(2d)). From the sync that starts it to its own sync out, a vector-quantized
layer takes:

```
cycles = 8 * (excitatory + inhibitory spikes) + 5      (+1 if there are only inhibitory spikes)
```

The uncompressed layer (`dense_layer`) reads one full row per spike and
updates all of its neurons one cycle later:

```
cycles = (excitatory + inhibitory spikes) + 5
```

With the synthetic inputs of the top-level testbench, 25 time steps take
about 18,000 cycles, or about 0.18 ms at 100 MHz. The published latency
for this configuration, measured on real MNIST inputs, is 0.246 ms per
input. The latency grows with spike activity. It is the price of the interleaved update.

### Why the memory is smaller

The layer-1 weights are 912 rows x 128 weights x 5 bits, which is 583,680
bits. Stored as pointers and codebook they take 912 x 176 bits plus
2048 x 40 bits, which is 242,432 bits. The pointer rows map onto 176-bit-wide
block RAMs. The 81,920-bit codebook needs to be dual-ported. After synthesis,
the complete design holds 249,332 memory bits, counting the 6,900-bit
layer-2 weight memory.

## Top-level interface (`vq4snn_top`)

| signal | dir | meaning |
|---|---|---|
| `start` | in | Begins an inference. Clears all potentials, spikes and arbiters. Accepted when `busy` is low. |
| `busy`, `step` | out | Inference running; index of the current time step |
| `in_ready` / `in_valid` / `in_spikes[783:0]` | out / in / in | One spike vector per time step. It is taken in the cycle both handshake signals are high. |
| `out_valid`, `out_spikes[9:0]`, `hid_spikes[127:0]` | out | One-cycle pulse at the end of each time step, with both layers' new spikes |
| `done` | out | High with the `out_valid` of the last time step |
| `ptr_*`, `cb_*`, `wm_*` | in | Write ports of the pointer memory, the codebook and the layer-2 weight memory. Layer-2 rows: 0..127 feedforward, 128..137 inhibitory. |
| `th_hid_*`, `th_out_*` | in | Write ports of the per-neuron thresholds |

The memories and thresholds are loaded while `busy` is low. The interface
does not include rate encoding of the inputs or turning output spikes into
a class. A host normally counts `out_spikes` over the 25 steps and picks the
neuron that fired most.

## Files

| file | contents |
|---|---|
| `rtl/vq4snn_pkg.sv` | Default sizes, `phase_t`, `reset_mode_t`, `top_state_t`, `cdiv`, `idxw` |
| `rtl/spike_arbiter.sv` | Spike register, lowest-index-first arbiter and encoder |
| `rtl/lif_neuron.sv` | LIF neuron with threshold register, saturation, hard or soft reset, shift leak |
| `rtl/pointer_memory.sv`, `rtl/vector_codebook.sv`, `rtl/weight_memory.sv` | The three memories (arrays with registered reads) |
| `rtl/group_sequencer.sv` | Group counter, pointer multiplexer, group decoder |
| `rtl/layer_ctrl.sv` | Phase controller and sync |
| `rtl/vq_layer.sv`, `rtl/dense_layer.sv` | Compressed and uncompressed layers |
| `rtl/vq4snn_top.sv` | The two-layer network and the time-step loop |
| `tb/tb_<module>.sv` | One self-checking testbench per module |
| `tb/tb_workloads.sv` | The top built for the SHD and AudioMNIST network sizes |
| `tb/tb_mnist_large.sv` | The four-layer MNIST network assembled from layer modules |
| `tb/rate_encoder_model.sv`, `tb/group_sequencer_check.sv`, `tb/vq_layer_check.sv`, `tb/top_workload_check.sv` | Testbench helpers |

## Parameters and other network sizes

All sizes are parameters. Setting them on `vq4snn_top` builds the other
networks that VQ4SNN was evaluated on:

| network | N_IN | N_HID | N_OUT | D | K | W | VW | T_STEPS | cycles per hidden spike |
|---|---|---|---|---|---|---|---|---|---|
| MNIST (default) | 784 | 128 | 10 | 8 | 2048 | 5 | 11 | 25 | 8 |
| SHD | 700 | 200 | 20 | 4 | 2048 | 7 | 14 | 100 | 25 |
| AudioMNIST | 40 | 150 | 10 | 4 | 1024 | 6 | 12 | 100 | 19 |

Here `W` and `VW` go to both layers (`W_HID`, `W_OUT`, `VW_HID`, `VW_OUT`).

When N is not a multiple of d, as for 150 neurons with d = 4, the last group
is only partly built. Its pointer still fetches a full vector, and the
surplus lanes are ignored.

`PORTS` sets the number of codebook ports. One port gives the single-ported
N/d schedule. More ports stand for a replicated codebook.

`REC_HID` and `REC_OUT` remove the inhibitory synapses of a layer, giving a
purely feedforward network. `RESET_MODE` selects a soft reset (threshold
subtracted) in the layers and neurons.

The larger MNIST network, 784-392-196-10 with two vector-quantized layers,
needs three layers. `vq4snn_top` has only two. The layer modules chain
directly for it, as `tb/tb_mnist_large.sv` shows.

## What follows the architecture and what is added

Taken from the published architecture:

- LIF neurons with weight addition for excitation and subtraction for
  inhibition
- Excitation first, then inhibition, then one state evaluation (threshold,
  reset to a fixed value, right-shift leak)
- Arbitration of active spikes
- Sync between layers, and time steps that never overlap
- Neuron state in flip-flops
- The two-level pointer/codebook memory, with N/d pointers per row and
  d-weight vectors
- The group counter, multiplexer and decoder
- The dual-ported codebook giving N/(2d) cycles per spike
- Layer 1 compressed and the output layer left uncompressed
- All sizes of the default configuration: 784-128-10, d = 8, k = 2048,
  5/11 bits, 25 steps, 912 pointer rows of 176 bits

Chosen here, because the description leaves it open:

- **Arbitration order**: lowest index first.
- **Memory timing**: one-cycle registered reads. The next pointer row is
  fetched during the last codebook step of the current one, so spikes follow
  with no bubble.
- **Port-to-group mapping**: `g mod PORTS`.
- **Clock gating**: the clock gating of idle neuron groups is a clock enable
  (`en` of `lif_neuron`).
- **Saturating potentials**: overflow behaviour is not specified.
- **Reset and leak**: the reset value is 0 and the leak shift is 4. Neither
  value is given.
- **Inhibitory spikes**: the layer's own spikes of the previous time step.
  Their weight rows follow the feedforward rows.
- **Output layer**: it also has inhibitory synapses. The network type shows
  them in every layer.
- **Sync**: a one-cycle pulse, issued when the new spikes are valid.
- **Handshakes and loading**: the input handshake, `start` clearing all
  state, and the write ports for memories and thresholds. Loading is not
  described.

Not reproduced here: training, K-means codebook generation, the accuracies,
and the FPGA resource and power figures. Those come from an external
software flow and from implementation.

## Verification

Each module has a self-checking testbench. It prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

The layer and top testbenches load pseudo-random pointers, codebooks, weights
and thresholds. They compare every spike and potential, every time step,
against an integer model of the equations above. That model expands the
pointers and codebook back into the full weight matrix. The testbenches also
check the cycle counts above.

`tb_vq4snn_top` runs three complete 25-step inferences at the default size.
The inputs are rate-encoded synthetic images, one of them blank. The input
handshake is stalled at random. The testbench counts and requires
excitation and inhibition in both layers, firing, saturation, steps without
input spikes, stalls, overlapped pointer fetches and state clearing between
inferences.

With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/vq4snn_pkg.sv tb/tb_vq4snn_top.sv --top-module tb_vq4snn_top
./obj_dir/Vtb_vq4snn_top
```

Use `tb/tb_<module>.sv` and `--top-module tb_<module>` to run a single
module's test. The full-size top-level test takes a few seconds.
