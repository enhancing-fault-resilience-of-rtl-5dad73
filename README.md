# An int8 neural-network accelerator with a Lightweight Correction Unit

This is RTL for a small quantized-neural-network (QNN) accelerator. It protects
selected neurons against soft errors in its datapath by **selective neuron
splitting**, a method published by Ahmadilivani et al. in "Enhancing Fault
Resilience of QNNs by Selective Neuron Splitting". This RTL is an independent
implementation of the hardware side of that method. Where the publication only
names a part, this design fills in the details, and each place where it does so
is listed below.

## The idea

A bit flip in the output of a PE (processing element) does not do the same harm
in both directions. A 0→1 flip in a high bit makes an int8 activation much larger,
and that error is carried forward to the classifier. A 1→0 flip makes the value
smaller, and later layers mostly mask it. Only a few neurons are critical, meaning
that an error in them often changes the classification. The method picks these
neurons offline and protects only them.

A critical neuron is protected by rewriting the network before it reaches the
accelerator:

* The critical neuron is replaced by two neurons, its *splits*.
* Each split gets half of the original weights and half of the original bias.
* Each split feeds the next layer with the original, unchanged outgoing weights.

Each split therefore produces about half of the original activation. The next
layer adds both halves, so the network still computes the same function. The
accelerator's computational part runs this modified network without change.

Halving has a useful effect. A fault-free split output of a non-negative
activation is at most 63, so bit 6, the top integer bit of an int8, is always 0.
After the layer, a **Lightweight Correction Unit (LCU)** combines the two splits
of each critical neuron:

1. `out = inp1 AND inp2`. A bit survives only if both splits agree that it is 1.
   This removes a 0→1 flip in either copy.
2. `out[6] = 0`. A fault-free split never has this bit set.

The corrected byte is written back to the Outputs Buffer at *both* split
addresses. The next layer then sees `2 x corrected ≈ original`. The cost is one
extra neuron per critical neuron, where triple modular redundancy (TMR) needs two.
The correction logic is eight AND gates and one cleared bit.

Worked example, with bit 7 on the left:

```
split 1 (one faulty bit:  bit 6)          1 1 0 1 0 1 0 1
split 2 (two faulty bits: bits 6 and 2)   1 1 0 1 0 0 0 1
AND                                       1 1 0 1 0 0 0 1
clear bit 6                               1 0 0 1 0 0 0 1   -> written to both
```

### Where the correction is, and is not, exact

* **A 0→1 flip in one split** is removed entirely, as long as the other split has
  a 0 in that bit position. The end-to-end test checks this.
* **A flip of bit 6** is always removed.
* **A 1→0 flip** in one split reaches the output as a 1→0 error. By the argument
  above, this direction is the benign one.
* **The same bit flipping 0→1 in both splits** is not corrected.
* **The two splits of a fault-free neuron differ** when the halving rounds them
  apart. In that case the AND can clear bits that are correct. Halving both splits
  the same way, as the testbenches do, keeps them identical. The splitting step
  that prepares the network decides how much any difference costs in accuracy.
* **The bit-6 rule assumes non-negative split activations**, for example after
  ReLU. For a negative int8 value, two's complement sign extension makes bit 6
  a 1 for anything above −64. Clearing it then gives a very different number.
  The RTL applies the rule exactly as the method states it. Use the LCU on layers
  whose outputs pass through ReLU.

## Organisation

```
             host write ports                          host read port
   ┌──────────────┬──────────────┬──────────────┐            │
   ▼              ▼              ▼              ▼            │
 Inputs       Weights/Bias     critical      layer cfg       │
 Buffer        Buffer          table          + start        │
 (4096x8)   (4096x16x8,         (1024 pairs)     │           │
             256x16x32)           │              ▼           │
   │ x          │ w[16], b[16]    └────────► controller ◄────┤
   ▼            ▼                               │  │         │
 ┌──────────────────────┐   acc[16]   ┌────────┐│  │  ┌──────┴───────┐
 │ 4x4 PE array (MAC)   │────────────►│act_unit├┼──┼─►│Outputs Buffer│
 └──────────────────────┘  acc_sel    └────────┘│  │  │  (8192x8)    │
                                                │  └──│ read / write │
                                      ┌─────┐   │     │ for the LCU  │
                                      │ LCU │◄──┴─────┤              │
                                      └─────┘────────►└──────────────┘
```

| module | role |
|---|---|
| `qnn_pkg` | `data_t` (int8), `acc_t` (int32), the layer descriptor `layer_cfg_t`, the critical-pair record `crit_pair_t`, and a reference `lcu_correct` function |
| `pe` | one MAC: loads the bias, then adds `x*w` on every enabled cycle |
| `pe_array` | `ROWS x COLS` PEs; each computes one neuron. The input activation is broadcast to all PEs, and each PE gets its own weight lane |
| `act_unit` | accumulator → int8: arithmetic shift right by `shift`, optional ReLU, saturation, optional max with the value already stored (max pooling) |
| `inputs_buffer`, `weight_bias_buffer`, `outputs_buffer`, `critical_table` | on-chip memories with synchronous reads |
| `controller` | runs one layer, then the LCU pass |
| `lcu` | AND, then clear bit 6; combinational |
| `qnn_accel_top` | wires everything together and provides the host ports and the fault-injection hook |

The design follows the publication's accelerator model in its block structure:
a PE array, an activation/normalisation stage, buffers for inputs, weights/biases
and outputs, a controller, and an LCU next to the Outputs Buffer. The publication
also fixes the int8 data type, the LCU function and the order of operations:
the layer is computed first, then the critical neurons go through the LCU and are
written back. Everything else is this design's own choice:

* the array size and the dataflow
* the buffer sizes and layouts
* the activation function and its scaling
* the host interface
* the critical table
* all timing

## Running a layer

### What the host prepares

A layer is a set of `N` dot products of length `K`, all over the **same** input
vector. That is exactly a fully-connected layer. The neurons are processed in
tiles of 16 (`LANES = ROWS*COLS`), and neuron `n` runs on PE lane `n % 16` of tile
`n / 16`.

| memory | contents |
|---|---|
| Inputs Buffer, word `k` | input activation `x[k]`, for `k < K` |
| Weights, word `t*K + k`, lane `p` | weight `k` of neuron `16t + p` |
| Biases, word `t`, lane `p` | 32-bit bias of neuron `16t + p` |
| critical table, entry `c` | `{addr_a, addr_b}`: the absolute Outputs Buffer addresses of the two splits of critical neuron `c` |

Unused lanes of the last tile may hold anything. Their results are not written.

The descriptor `cfg` is sampled on the cycle `start` is high. It has these fields:

* `num_in` = `K`, which must be at least 1.
* `num_out` = `N`, counting both splits of every split neuron.
* `num_crit`, the number of table entries to process.
* `out_base`, the Outputs Buffer address where neuron 0 is written.
* `shift` and `relu_en`, the activation settings.
* `pool_max`. When set, each write-back first reads the word already at its
  Outputs Buffer address and stores the larger of the two (see below).

`busy` stays high until `done` pulses for one cycle. The host must not write any
buffer while `busy` is high; an assertion in the top checks this. The results can
then be read through `ob_raddr`/`ob_rdata`, which has one cycle of latency. To run
the next layer, the host copies them into the Inputs Buffer.

### Splitting and the critical table

The splitting step belongs to the network-preparation flow, not to the hardware.
To split critical neuron `i` of a layer:

1. Halve its weights and bias.
2. Put the first split at index `i` and the second split at a new index, for
   example after the layer's other neurons.
3. Add the pair to the critical table.
4. In the next layer, add an input column for the new neuron that repeats the
   original outgoing weight of neuron `i`.

`tb_qnn_accel_top` shows this step on a two-layer network: its `split_layer`
function performs it.

### Sequence and timing

For each tile, the controller goes through these steps:

| step | work | cycles |
|---|---|---|
| `BIAS_RD` | read the bias word | 1 |
| `BIAS_LD` | load the biases into the PEs | 1 |
| `MAC` | issue one input read and one weight-word read per cycle | K |
| `DRAIN` | the PEs accumulate each read one cycle later; this covers the last one | 1 |
| `WB_RD` | only with `pool_max`: read the stored word for the next write | 1 per neuron |
| `WB` | write `act(acc[j])` to `out_base + 16t + j`, one neuron per cycle | n |

`n` is 16, or whatever remains in the last tile. With `pool_max`, `WB_RD` and
`WB` alternate, so the write-back takes `2n` cycles.

After the last tile, the LCU pass handles each critical pair in five cycles:

* `TAB`: read the table entry.
* `RA`: read split a.
* `RB`: capture split a, and read split b.
* `WA`: write `lcu(a, b)` to `addr_a`. `lcu_fix` pulses here.
* `WB`: write the same value to `addr_b`.

The busy time of a layer is therefore

    sum over tiles (K + 3 + n*(1 + pool_max))  +  5 * num_crit  +  2   cycles

For example, a 784-input, 100-neuron fully-connected layer with 20 critical
neurons runs as 120 neurons in 8 tiles: `8*(784+3) + 120 + 100 + 2 = 6518`
cycles. The LCU adds 5 cycles per critical neuron. The extra split neurons cost
one more PE slot each, where TMR would cost two.

### Larger layers and convolutions

`out_base` lets a layer run in several passes:

* A layer whose weights exceed 4096 words is split by neurons. Each pass gets
  its own weights and biases and writes to its own part of the Outputs Buffer.
* A convolution runs as one pass per output position. The host loads that
  position's input patch, and each pass computes all output channels at that
  position.

The critical pairs are given with the last pass, after both splits of every pair
are in the Outputs Buffer.

Max pooling uses the same passes. All passes that belong to one pooling window
write to the same `out_base`. The first pass runs with `pool_max = 0` and the
others with `pool_max = 1`, so the Outputs Buffer ends up holding the maximum
over the window. An LCU pass on pooled outputs should run after the last pass of
the window. The publication does not describe how convolutions are
mapped; this is the simplest mapping the datapath supports.

## Fault-injection hook

The ports `fi_en`, `fi_addr` and `fi_mask` exist for testing, to model a fault in
the computational part. While `fi_en` is high, the activation written to Outputs
Buffer address `fi_addr` during the layer is XORed with `fi_mask`. The LCU's
write-back is not affected. Tie `fi_en` low in normal use.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `ROWS`, `COLS` | 4, 4 | PE array; `LANES = ROWS*COLS` neurons per tile |
| `IN_DEPTH` | 4096 | longest dot product `K` |
| `WDEPTH` | 4096 | weight words of `LANES` int8; bounds `tiles*K` per pass |
| `BDEPTH` | 256 | bias words; bounds the tiles per pass |
| `OUT_DEPTH` | 8192 | Outputs Buffer words |
| `CT_DEPTH` | 1024 | critical pairs per layer |
| `DATA_W`, `ACC_W` (package) | 8, 32 | activation and weight width; accumulator and bias width |

The publication gives none of these sizes except the 8-bit data width. The chosen
values are meant to hold the networks it evaluates, as the next section explains.

## Capacity against the evaluated networks

The publication evaluates an MLP-7 and a LeNet-5 on MNIST and an AlexNet on
CIFAR-10. At its chosen vulnerability threshold, these networks have 503, 187
and 622 critical neurons. Even if all of a network's critical neurons were
corrected at once, they would fit the 1024-entry critical table.

The split networks have these total neuron counts:

| network | neurons after splitting |
|---|---|
| MLP-7 | 3319 |
| LeNet-5 | 4871 |
| AlexNet | 103790 |

Each of the whole split MLP-7 and the whole split LeNet-5 fits in the 8192-word
Outputs Buffer. The largest LeNet-5 layer is its first convolution, 6x24x24 = 3456
outputs, and its longest dot product has 150 inputs. The per-layer shapes of the
AlexNet variant are not known, so whether its largest layer fits cannot be said.

## What is not built

* **Average pooling.** The publication names pooling as part of the activation
  stage but does not describe it. Only max pooling, done by read-modify-write,
  is built.
* **Splits of convolution outputs that are pooled.** A split output element
  carries half a value, while the other elements of its pooling window carry
  whole ones, so the maximum no longer matches the original network. The
  LeNet-5 test therefore splits neurons only in the fully-connected layers.
  Splits in a convolution that is not pooled work like any other split.
* **Normalisation.** It is reduced to a per-layer power-of-two shift; there is
  no multiplier-based requantisation.
* **Splitting and critical-neuron selection.** Deciding which neurons are
  critical uses a per-neuron vulnerability factor computed from gradients and
  classification sweeps. Like the splitting itself, this is offline software,
  and neither is hardware here.
* **The TMR baseline.** It serves only as a comparison in the publication and is
  not part of this design.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_lcu` | the worked example; all 65536 input pairs against a bit-level model; every single 0→1 upset of a non-negative split value below 64 |
| `tb_pe`, `tb_pe_array` | random dot products against a software sum; bias load priority |
| `tb_act_unit` | corner cases and random values against a floor-division model; the pooling maximum |
| `tb_*_buffer`, `tb_critical_table` | full write/read-back against shadow arrays; lane independence; read-during-write returns the old data |
| `tb_controller` | address sequences, write-back order, LCU write pairs, and the cycle formula for seven layer shapes, one with pooling, against modelled memories |
| `tb_qnn_accel_top` | a two-layer split network at the default sizes, checked against a reference model: all outputs and the cycle counts; a masked 0→1 fault; a cleared bit-6 fault; an unprotected fault that propagates; multi-tile and partial tiles; ReLU; saturation; `out_base`; a two-pass max pool. It counts each of these and fails if one never happened |
| `tb_lenet5_workload` | a LeNet-5-shaped inference (two 5x5 convolutions, each followed by a 2x2 max pool, then 120, 84 and 10 neurons), run as 643 passes of one output position each, of which 480 pool; 187 critical neurons split in the fully-connected layers; every pooled map and output against a direct convolution model, every pass's cycle count, and a masked fault |
| `tb_mlp7_workload` | the MLP-7 shape (784 → 5x512 → 256 → 10) with 503 critical neurons split, run layer by layer in 41 passes; every output against a reference model, the cycle count of every pass, all 503 corrections, and a masked fault |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/qnn_pkg.sv \
          tb/tb_qnn_accel_top.sv --top-module tb_qnn_accel_top
./obj_dir/Vtb_qnn_accel_top
```

Replace the testbench name to run any other test. All testbenches except
`tb_mlp7_workload` run in well under a second; that one takes a few seconds. The RTL is plain SystemVerilog-2017 and also elaborates with
Yosys through its slang front end.
