# A sparse dataflow DNN accelerator in SystemVerilog

In a dataflow (layer-pipelined) accelerator every layer of the network has its own
hardware, and all layers run at once on successive data. The pipeline runs only as
fast as its slowest layer. Zeros in the weights and activations are useful only if
they let a layer finish its dot products in fewer cycles, or with fewer multipliers,
than the dense computation would need.

This RTL implements the sparse layer hardware described in *HASS: Hardware-Aware
Sparsity Search for Dataflow DNN Accelerator* (Yu et al.). Its building block is the
**Sparse Vector Dot Product Engine (SPE)**. An SPE receives a vector of `M`
activation/weight pairs, for example one 3x3 window (`M = 9`). It has only `N < M`
multiply-accumulate units. First, the SPE sets to zero every value whose magnitude is
below a per-layer threshold. It then drops every pair that contains a zero, and feeds
the remaining pairs to its `N` MACs, `N` per cycle. If a fraction `S` of the pairs
contains a zero, a vector takes

    t = ceil((1 - S) * M / N)   cycles (at least one),

instead of `M / N`. The number of MACs per SPE is therefore chosen from the expected
sparsity of each layer. The paper's ResNet-18 design point uses 7 MACs per SPE where
31 % of the pairs are zero, and 2 MACs where 87 % are zero. In both cases the SPE
handles about one 3x3 window per cycle.

The hardware-aware pruning search that picks the thresholds and the per-layer sizes
runs in software. It is not part of this RTL. Here the thresholds are run-time inputs
and the sizes are parameters.

## The pipeline (`hass_top`)

```
 windows ──► sparse_layer (convolution) ──► sync_fifo ──► sparse_layer (fully connected) ──► results
 conv_in_*   CONV_I_PAR x CONV_O_PAR SPEs   (inter-layer)   FC_O_PAR SPEs, FC_M = CONV_O_PAR    out_*
```

The top connects a sparse convolutional layer to a sparse fully connected layer through
a FIFO. Every link is a valid/ready handshake: a word moves when both are high. Each
output beat of the convolutional layer holds `CONV_O_PAR` channels of one output
position. That beat becomes one input vector of the fully connected layer, which folds
`FC_FOLD` such vectors into each of its `FC_O_PAR` outputs. The fully connected layer
therefore sees the flattened convolution output of `FC_FOLD` positions.

The windows are produced outside the design: the sliding-window stage that cuts a
feature map into 3x3 windows is not included. Neither are the pooling layers of a
complete network. `conv_in_*` is where a window generator would connect. Every layer
has its own pair of thresholds (`*_tau_a` for activations, `*_tau_w` for weights) and
its own weight-load port.

Default sizes:

| parameter | default | origin |
|---|---|---|
| `CONV_M` (pairs per SPE vector) | 9 | a 3x3 kernel; it matches the paper's per-layer MAC counts, which equal `ceil((1-S)*9)` |
| `CONV_N` (MACs per SPE) | 7 | paper, first ResNet-18 layer |
| `CONV_I_PAR x CONV_O_PAR` | 2 x 64 = 128 SPEs | paper gives 128 SPEs; the 2 x 64 split is this design's choice |
| `CONV_FOLD`, `CONV_GROUPS` | 32, 1 | 64 input and 64 output channels (ResNet-18's first 3x3 stage) |
| `FC_N`, `FC_O_PAR`, `FC_FOLD` | 16, 10, 4 | this design's choice |
| `BUF_DEPTH` (SPE output buffer), `IL_DEPTH` (inter-layer FIFO) | 4, 4 | this design's choice; the paper sizes buffers from run-time statistics |

At these defaults the convolutional layer holds the complete weight set of a
64-to-64-channel 3x3 layer: 128 SPEs x 32 vectors x 9 weights = 36,864 weights,
which is 64 x 64 x 9.

## A layer (`sparse_layer`)

A layer is a grid of `I_PAR x O_PAR` SPEs. Each input beat carries `I_PAR` data
bundles of `M` activations. SPE `(i, o)` pairs bundle `i` with the weights of output
filter `o`, taken from its own weight memory (`weight_mem`). Two kinds of accumulation
combine the partial results:

* **Time-wise folding (`acc`)**: a layer with more input channels than `I_PAR`
  computes each output from `FOLD` successive beats. The ACC behind each SPE adds its
  `FOLD` dot products.
* **Across SPEs ('+')**: for each output filter, the `I_PAR` folded sums are added.
  The result is requantised to 16 bits: shifted right by `FRAC_W` = 8 bits and
  saturated.

Input beats follow a fixed order: for each output position, for each filter group
`g < GROUPS`, for each fold `f < FOLD`. The layer reads weight vector `g*FOLD + f`
from a counter that wraps. With several filter groups, the producer sends each window
once per group.

All SPEs take a beat together: `in_ready` is the AND of their readys. After that they
drift apart, because each skips a different number of zeros. The SPE output buffers
absorb the difference. An output beat is released only when every ACC holds a result.
Deeper buffers let the SPEs drift further before one of them blocks the common input.
This is the buffering strategy the paper uses against run-time rate imbalance.

The paper also describes a balancing strategy: a compile-time assignment of channels to
SPEs that evens out their sparsity. In this hardware it only changes which weights are
loaded into which SPE, and in what order the channels arrive.

## Inside the SPE (`spe`)

```
 in_act[0..M-1], in_wgt[0..M-1]
        │ M x clip (|x| < tau -> 0)
        │ M x zero_checker ──── zero flags ──► spe_counter (one per slot)
        ▼                                            ▲ grant counts
  two vector slots (head, next) + pending masks ──► rr_arbiter (head), rr_arbiter (next)
                                                     │ up to N grants in total
                                                     ▼
                                  N x mac ── head shares ──► adder_tree ──► register ──► Buffer (sync_fifo) ──► out
```

**Loading.** One handshake transfers a whole vector. Each pair passes through a clip
and a zero checker. The SPE has two vector slots. The *head* slot holds the vector
being finished; the *next* slot holds a prefetched vector. A slot stores the clipped
pairs, and a *pending* mask marks the non-zero pairs not yet computed. The number of
zero pairs goes straight into that slot's counter: those pairs are finished as soon as
the vector is loaded. A vector is taken while the next slot is free, or when the head
vector ends in the current cycle.

**Dispatch.** In every dispatch cycle the head arbiter scans the head's pending mask.
It starts at its pointer, which holds the lane after the last lane it granted, and
grants up to `N` pending lanes. Grant `k` drives MAC `k`. The granted lanes leave the
pending mask, and their number is added to the head counter.

**Sharing the last cycle.** The head vector ends in the cycle in which its count plus
its grants reaches `M`. In that cycle, the MACs the head leaves free take pairs of the
next vector through the second arbiter. The next vector always keeps at least one
pair for a later cycle, so at most one vector ends per cycle. Each MAC therefore holds
a partial sum of one vector or another. It reports its share of the head vector to
the adder tree: its register if that register already belongs to the head vector,
plus its product if it gets a head pair now. On the switch, a MAC with a next-vector
pair restarts from that product; the others restart from 0. This is the 0/feedback
multiplexer of the paper's MAC. A vector with no non-zero pairs still takes one cycle,
and its result is zero.

**Release.** In the head vector's last cycle the adder tree adds the MAC shares. The
sum is registered, written into the output Buffer in the next cycle, and visible at
`out_valid` one cycle later. Then the slots swap roles.

**Back-pressure.** The SPE dispatches only if the Buffer will have room for a result
that finishes in this cycle. The test is occupancy + result being written − result
being read < `BUF_DEPTH`. When the test fails, the SPE holds and raises `stall`.

Timing, with the output drained: a result appears at `out_valid` two cycles after the
dispatch cycle that ends its vector. Without sharing, a vector with `nnz` non-zero
pairs would take `max(1, ceil(nnz / N))` cycles. With sharing, a stream of vectors
keeps all `N` MACs busy except in a cycle that ends a vector and cannot share. That
happens when no next vector is waiting, the next vector has a single pair left, or the
next vector is all zero. `tb_spe` runs a cycle model of this rule. It checks `in_ready`
in every cycle and the exact cycle of every result.

### Average sparsity versus per-window sparsity

The formula `t = ceil((1-S)M/N)` uses the *average* sparsity. If each window were
computed on its own, it would cost `max(1, ceil(nnz/N))` cycles for its own `nnz`, and
the rounding up would happen window by window. Sharing the last cycle with the next
window removes most of that loss. `tb_resnet18_spe_rates` runs one SPE for each of the
16 3x3 layers of the paper's ResNet-18 design point, with the paper's sparsity and MAC
count for each. Zeros are placed independently at random. For every layer the formula
gives one cycle per window. The measured rate is 1.01 to 1.12 cycles per window;
without sharing it would be 1.09 to 1.39. The remaining gap is highest for the layers
with 3 MACs at 67 % sparsity. It comes from the cycles that cannot share, listed above.

## Number format

Activations and weights are 16-bit two's complement. The paper specifies 16-bit fixed
point; placing the binary point at Q8.8 is this design's choice. Products are 32
bits. MAC, ACC and adder values are 40 bits, so no overflow is possible for up to 256
accumulated products; the default convolution adds 576 bounded products per output.
The clip compares the magnitude, computed in 17 bits, against the unsigned threshold.
A value is cut only when it is strictly smaller than the threshold.

## What follows the paper and what does not

Taken from the paper:

* The SPE structure: clip modules with configurable thresholds, zero checkers whose
  zero flags feed a counter, a round-robin arbiter dispatching non-zero pairs to
  several MACs, MACs with a 0/feedback multiplexer, an N-input adder tree and an
  output buffer.
* The cycle count `ceil((1-S)M/N)`.
* ACC folding and the '+' across SPEs.
* Per-layer weight and activation thresholds.
* 16-bit data.
* Layers linked by FIFOs and handshakes.
* Activations kept unencoded.

This design's own choices, where the paper gives no detail:

* The whole-vector input handshake, the two vector slots and the rule for sharing a
  vector's last cycle with the next vector.
* The arbiter's scan order and pointer rule.
* The counter arithmetic.
* The buffer back-pressure rule.
* The ACC's one-entry output register.
* The beat order and weight addressing of a layer.
* The broadcast-input and joined-output handshakes.
* Q8.8 requantisation without bias or activation function.
* 40-bit accumulators.
* Asynchronously read weight memories.
* All fully connected layer sizes and all buffer depths.

One choice departs from the figure: the drawing shows a single threshold line into
all clip modules. The text, however, defines separate thresholds for weights and
activations, and this design follows the text.

Not included:

* The sliding-window generator and the max/average pooling layers, which the paper
  names but takes from its underlying toolflow.
* Partitioning a network over several FPGA reconfigurations.
* The host interface.

A complete network is a chain of `sparse_layer` instances, one per layer, each with
its own parameters. Only two are instantiated here, so none of the complete networks
the paper evaluates (ResNet-18/50, MobileNetV2/V3) fits in this top. Its
convolutional layer does match one layer of the paper's ResNet-18 design point.

## Files

| file | contents |
|---|---|
| `rtl/hass_pkg.sv` | data types, widths, requantisation function |
| `rtl/clip.sv`, `rtl/zero_checker.sv` | per-lane pruning and zero detection |
| `rtl/rr_arbiter.sv`, `rtl/spe_counter.sv` | dynamic scheduler of the SPE |
| `rtl/mac.sv`, `rtl/adder_tree.sv` | arithmetic |
| `rtl/sync_fifo.sv` | SPE output buffer and inter-layer FIFO |
| `rtl/spe.sv` | Sparse Vector Dot Product Engine |
| `rtl/acc.sv`, `rtl/weight_mem.sv`, `rtl/sparse_layer.sv` | a layer |
| `rtl/hass_top.sv` | two-layer pipeline |
| `tb/tb_*.sv` | one self-checking testbench per module, `tb_ref_pkg.sv` holds the reference arithmetic |

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself. A watchdog
ends any run that hangs. With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Irtl -Itb \
          --top-module tb_spe rtl/hass_pkg.sv tb/tb_ref_pkg.sv tb/tb_spe.sv
./obj_dir/Vtb_spe
```

Replace `tb_spe` with any other testbench; the modules it uses are found through `-y`.
List the two packages, `rtl/hass_pkg.sv` and `tb/tb_ref_pkg.sv`, before the testbench,
as above.

The testbenches that matter most:

* `tb_spe`: checks values, `in_ready` in every cycle and the cycle of each result
  against a model of the scheduler, then runs with output back-pressure.
* `tb_sparse_layer`: a 2x3-SPE layer with folding and two filter groups, against a
  convolution model.
* `tb_resnet18_spe_rates`: the 16 ResNet-18 layer configurations described above.
* `tb_hass_top`: the two-layer pipeline at reduced size (runs in a second).
* `tb_hass_top_full`: the pipeline at its default sizes, eight inputs, about three
  minutes including compilation.

The two pipeline tests compare every output with a reference that clips, convolves,
requantises, flattens and applies the fully connected layer. They also count how
often each mechanism occurs: zero skipping, clipping, multi-cycle vectors, all-zero
vectors, folding, a last cycle shared with the next vector, SPE stalls, a full inter-layer FIFO and input back-pressure. The
test fails if any count stays at zero. To make the stalls happen, the output is held
back in two bursts out of every three, starting at reset, so the back-pressure travels
all the way to the input.

To change the design for another layer, set `M`, `N`, `I_PAR`, `O_PAR`, `FOLD` and
`GROUPS` of a `sparse_layer`. Choose `N` close to `(1-S)*M` for the layer's expected
sparsity `S`, and size `O_PAR x I_PAR` so that every layer of the chain sustains the
same rate.
