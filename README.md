# Logic-shrunk LUT layer

A binary neural network (BNN) computes each output channel as
`y = phi(x . w)`: N XNOR gates multiply ±1 activations by ±1 weights, an
adder tree counts the matches and a threshold turns the count back into ±1.
On an FPGA the XNORs waste the fabric's lookup tables (LUTs), each of which
could compute any Boolean function of several inputs.

A LUT-based network keeps only a small fraction `(1 - theta)` of those
XNORs (node pruning) and replaces each survivor with a trainable K-input
LUT whose other K-1 inputs are wired to randomly chosen activations (logic
expansion). The weights disappear into the LUT truth tables. Logic
shrinkage then removes, after training, the LUT inputs that matter least.
The result is a netlist in which LUT n has its own size `K'_n <= K`. A LUT
left with no inputs is a constant and vanishes.

This repository holds synthesizable SystemVerilog for the inference side of
that scheme: one fully unrolled, logic-shrunk layer that takes one
activation vector per clock. By default it is sized as the expanded layer
of the CNV network for CIFAR-10 (2304 inputs, 256 channels, K = 4, node
sparsity 94 %, LUT input sparsity about 75 %). The shrinking arithmetic is
done during elaboration, as SystemVerilog constant functions.

## From trained mask to hardened LUT

During training, each K-LUT holds `2^K` real-valued parameters `c(d)`, one
per input pattern `d in {-1,+1}^K`. Binarizing them (sign) gives the truth
table. Shrinkage works on the real values in three steps.

**Salience.** The importance of input i is the total change of the LUT's
output when only that input flips:

    s_i = sum over all patterns of the other inputs of |c(.., +1_i, ..) - c(.., -1_i, ..)|

An input whose flip never changes the output has salience 0.

**Removal.** Severing input i replaces each pair of entries that differ
only in input i with their mean, written back to both places. In matrix
form this is `c' = U_i c` with `U_i = 1/2 I(2^(K-i)) (x) [[1,1],[1,1]] (x) I(2^(i-1))`.
Severing several inputs applies the product of their `U_i`. Each entry then
becomes the mean of all entries that agree with it on the inputs still
connected.

**Hardening.** The shrunk entries are binarized. The table still has `2^K`
entries, but it no longer depends on the severed inputs.

Worked example. A 2-LUT has entries (×100) of -90, -1, -85 and +5 for
`(x1,x2)` = (-1,-1), (+1,-1), (-1,+1) and (+1,+1). Binarized, that is an AND
gate. The saliences are s1 = 89 + 90 = 179 and s2 = 5 + 6 = 11. Severing x2
turns the entries into -87.5, +2, -87.5 and +2, so the LUT becomes the wire
`y = x1`. `tb_shrunk_lut` checks this example.

Index convention used throughout: bit `i-1` of a truth-table index is input
`i`, and a bit value of 1 means activation +1. This is the ordering under
which the Kronecker form of `U_i` above is correct.

The functions live in `rtl/ls_pkg.sv`:

| function | what it computes |
|---|---|
| `mask_param` | the trained real-valued entry `c(d)` (synthetic, see below) |
| `salience` | `s_i` |
| `shrink_lut` | the severed-input set, the product of the `U_i` applied as pairwise sums, and the binarization |
| `lut_config` | `shrink_lut` applied to one LUT of the layer |
| `lut_sources`, `conn` | which layer inputs feed each LUT |
| `act_thresh` | the channel's activation threshold |

`shrink_lut` adds pairs instead of averaging them. A sum is the mean times a
power of two, so its sign is the same and the arithmetic stays exact in
integers.

## Hardware structure

```
 in_act ──► [x_q reg] ──► per channel c (N_OUT in parallel):
                            N_LUT × shrunk_lut ─► popcount_tree ─► count >= T_c ─► [out reg] ──► out_act
```

* **`shrunk_lut`** computes `y = mask[x & ~prune]`. Severed inputs are
  forced to 0 in the index, so only the `K'` live inputs reach the LUT. An
  always-on assertion checks that the mask really is independent of the
  severed inputs. The mask and prune values arrive on ports that the layer
  ties to constants. After constant propagation every instance becomes its
  own hardened `K'`-LUT. A 1-input LUT becomes a wire or an inverter. A
  0-input LUT becomes a constant.
* **`popcount_tree`** counts the +1 outputs of a channel's LUTs. It is a
  balanced adder tree with `ceil(log2 N)` levels, written as an in-place
  pairwise reduction.
* **`lut_channel`** is one output channel: its LUTs, their adder tree and
  the activation `y = (count >= thresh)`. The threshold stands for the
  batch normalization that follows each layer, folded into an integer.
  Fully severed LUTs stay in the tree as constants. Synthesis folds them
  into the sum.
* **`lut_layer`** (top) instantiates `N_OUT` channels. For every LUT it
  computes at elaboration the hardened mask, the severed inputs and the
  wiring.

### Interface and timing of `lut_layer`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock (the reference implementation closes timing at 200 MHz) |
| `rst_n` | in | 1 | synchronous, active low; clears both valid flags and data registers |
| `in_valid` | in | 1 | `in_act` carries a vector in this cycle |
| `in_act` | in | N_IN | activations, 1 = +1 |
| `out_valid` | out | 1 | `out_act` carries a result |
| `out_act` | out | N_OUT | activations, 1 = +1 |

The input is registered on the clock edge at which `in_valid` is high. The
LUTs, trees and comparators are combinational. The result is registered on
the following edge. So `out_valid` rises exactly two cycles after
`in_valid`, and a new vector can enter every cycle. There is no
back-pressure: the layer always accepts input, like the fixed-rate dataflow
engine it belongs to.

### Parameters

| parameter | default | origin |
|---|---|---|
| `K` | 4 | the initial LUT size used for all reported results (1..6 supported) |
| `N_IN` | 2304 | 256 input channels × 3×3 kernel. The 3×3 input map follows from CNV's unpadded convolutions. |
| `N_OUT` | 256 | output channels of the expanded CNV layer |
| `THETA_PERMILLE` | 940 | node sparsity 94.0 % of the CIFAR-10 design |
| `N_LUT` | 138 | `floor((1 - theta) · N_IN)`: XNORs kept by node pruning, one K-LUT each |
| `SAL_THRESH` | 795 | salience cut. On the default synthetic masks it severs 75 % of LUT inputs, the target sparsity of the reference design. |
| `SEED` | 1 | seed of the synthetic masks, wiring and thresholds |

At the defaults the layer holds 35,328 LUTs before shrinkage.

## Where the numbers come from, and how to use trained ones

The trained masks, the random wiring and the batch-norm thresholds are
results of training, which is not part of this design. To keep any size of
layer elaborable without weight files, three functions in `ls_pkg` make
stand-ins from a 32-bit integer hash of (seed, channel, LUT, entry):

* `mask_param`: 8-bit signed values uniform in [-128, 127]
* `conn`: uniform random wiring
* `act_thresh`: thresholds within ±2 of half the LUT count

Salience, removal and binarization are then applied exactly as described
above.

To deploy a trained network, change only `mask_param`, `conn` and
`act_thresh` (for example, replace them with generated package constants)
and `SAL_THRESH`. Nothing else depends on where the values come from.

Because the stand-in masks are uniform noise, the mix of LUT sizes after
shrinkage differs from that of a trained network. Trained networks have
fewer fully severed LUTs and more 1-input LUTs. On the 24-channel test
layer, for example, 41 % of LUTs end with no inputs, 31 % with one, 14 %
with two, 12 % with three and 2 % keep all four.

## Departures from the reference method

* **One cut, no retraining.** Training shrinks in three rounds of
  increasing sparsity, with retraining between rounds, and it ranks every
  input of the layer globally. This design makes a single cut on the
  pre-shrinkage masks. The cut is a salience threshold, which selects the
  same inputs as a rank cut when the scores are distinct. Retraining cannot
  happen in hardware, and its effect on the masks is not reproduced.
* **Activations are 1 bit.** The reference CIFAR-10 design reports 70,778
  LUTs before synthesis for this layer. That is about twice the 35,328
  built here, which suggests that its activations had more than one bit.
  That detail is not specified, so it is not built.
* **Only the expanded layer is built.** The other layers of the networks
  are plain BNN layers of the starting point. They are not part of this
  design.
* **Ordering conflict in the method's worked example.** Its worked 2-LUT
  matrices label the entries in the opposite order to the element-wise
  equations and to the general Kronecker formula. This design follows the
  latter two, which agree with each other.
* **Details that are this design's own choices:**
  * a mean of exactly 0 binarizes to +1
  * the two register stages and the valid-only handshake
  * synchronous reset
  * no pipelining inside the adder tree
  * gating of severed inputs instead of relying on synthesis to find the
    redundancy

## Workloads

| workload | size needed | at the default parameters |
|---|---|---|
| CIFAR-10, CNV expanded layer, θ = 94 % | 2304 → 256, 138 LUTs/channel | exactly the default |
| SVHN, same layer, θ = 98 % | 2304 → 256, 46 LUTs/channel | same shape; re-elaborate with `THETA_PERMILLE=980` (masks are hardened) |
| MNIST, LFC, four expanded layers, θ = 90 % | 256→256 ×3 and 256→10, 25 LUTs/channel | each is a `lut_layer` instance with other parameters; `tb_lfc_layers` chains four of them |
| ImageNet, Bi-Real-18, one conv of a residual block, θ = 30 % | 1612 LUTs/channel per output pixel, over a whole feature map | not held: one output pixel only |

## Verification

Every testbench checks itself. Each prints `TB_RESULT checks=N failures=M`
and has a cycle or time watchdog.

| testbench | what it checks |
|---|---|
| `tb_shrunk_lut` | the worked AND example (saliences 179 and 11, wire after shrinking, AND before); 400 random 4-LUTs with random severed sets against direct averaging |
| `tb_popcount_tree` | N = 138, 5 and 1; zeros, ones, one-hot and 2000 random vectors |
| `tb_lut_channel` | 100 random channels of twenty 4-LUTs (some fully severed, some intact), 50 vectors each; count and activation |
| `tb_lut_layer` | end to end at 240 inputs × 24 channels (details below) |
| `tb_lfc_layers` | four layers chained at the LFC sizes (256→256→256→256→10, θ = 90 %): 200 back-to-back vectors against the chained reference, 8-cycle latency |

`tb_lut_layer` streams 300 vectors with random gaps. For each output it
checks the value and that it arrives exactly two cycles after its input.
The expected values come from a separate reference model, `tb/tb_ref_pkg.sv`:
it recomputes salience, the severed set and each LUT's output as the sign
of the mean over agreeing entries, and it shares only the synthetic trained
values with the RTL. The test also requires each of these to happen at
least once:

* severed inputs
* fully removed LUTs
* partially shrunk LUTs
* intact 4-LUTs
* both output values
* back-to-back vectors
* idle cycles
* a reset that drops a vector in flight

Running a testbench with Verilator, from the repository root:

```
verilator --binary --timing --assert -Mdir obj \
  rtl/ls_pkg.sv tb/tb_ref_pkg.sv rtl/shrunk_lut.sv rtl/popcount_tree.sv \
  rtl/lut_channel.sv rtl/lut_layer.sv tb/tb_lut_layer.sv --top-module tb_lut_layer
./obj/Vtb_lut_layer
```

Replace the last file and the top module name to run the other
testbenches. The largest configurations simulated so far are the four
chained LFC layers of `tb_lfc_layers` (about 19,500 LUTs; about 3 minutes
to build) and the 24-channel layer of `tb_lut_layer`. The default layer
(35,328 LUTs) passes lint and elaboration. A simulation model of it takes
well over 10 minutes to compile with Verilator, because all 35,328 LUT
configurations are evaluated as constants and the generated model is
large. To simulate it, remove the parameter overrides (`N_IN`, `N_OUT`)
from `tb_lut_layer`, reduce the number of vectors and raise its watchdog.

Elaboration cost is the main practical limit of this style. Every LUT is a
generate iteration with its own constant-function calls. Tools that cap the
total number of generate iterations (slang's default is 131,072) accept the
default layer, which uses about 71,000 of them, but not a layer several
times larger.
