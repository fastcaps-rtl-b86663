# A kernel-pruned CapsNet accelerator in SystemVerilog

A capsule network (CapsNet) classifies an image in three stages:
- a convolution with ReLU;
- a second convolution whose output channels are grouped into small vectors, the *primary capsules*;
- *dynamic routing*, which repeatedly computes how strongly each primary capsule votes for each class capsule.

Two things make CapsNet hard to run on a small FPGA:
- The routing step is full of exponentials, divisions and square roots.
- The PrimaryCaps layer and the routing weights are large.

This design takes the two remedies of the FastCaps methodology (Sharma et al., "FastCaps: A Design Methodology for Accelerating Capsule Network on FPGAs") and builds them in RTL:

1. **Kernel pruning.** Whole 9x9 kernels are removed offline. Only the surviving kernels and a short list of their input-channel indices are stored. The convolution hardware walks that list, so a pruned kernel costs neither memory nor cycles. When every kernel of a PrimaryCaps output channel goes, the capsules built from it go too. In the MNIST network, 1152 primary capsules drop to 252, so routing has 252 inputs instead of 1152.
2. **Cheap non-linear functions.**
   - `exp` is a fifth-order Taylor polynomial around 0.5, with e^0.5 folded into the coefficients: 5 multiplications and 5 additions.
   - A division a/b is computed as `exp(log a - log b)`, so it needs no divider.

The pruning itself is done offline in software (the paper's LookAhead Kernel Pruning), so this RTL contains none of it. The hardware receives a pruned network and runs it.

All multiply-accumulate work goes through one array of 10 processing elements (PEs). Each PE does nine 16-bit multiplications and an adder tree. The convolution module and the routing module take turns owning the array.

## Block diagram and one image

```
 host ports ──► weight RAM   index RAM   activation RAM   routing-weight RAM
                   │            │           ▲   │               │
                   ▼            ▼           │   ▼               ▼
              ┌───────── conv_module ───────┐  ┌──── routing_module ────┐
              │ index_control + activation │  │ Matmul  Softmax  FC     │
              │ kernel / data / output buf │  │ Agreement   buffers     │
              └────────────┬───────────────┘  └───┬───────────┬────────┘
                           └──► pe_array (10 PEs) ◄┘           │
                                                        squash_unit
              process_control_unit: Conv1 → PrimaryCaps → routing, owns the PE array
```

`fastcaps_top` handles one image per `start` pulse. The image must already be in the activation RAM, and the network in the other RAMs.

1. **Conv1.** 9x9 kernels, stride 1, 256 channels, ReLU. The 28x28 input becomes 256 maps of 20x20.
2. **PrimaryCaps.** A 9x9 convolution with stride 2 over those 256 maps, keeping only the surviving kernels. At the default size it produces 56 channels of 6x6, that is 7 capsule types of 8 dimensions at 36 positions: 252 capsules.
3. **Dynamic routing** over 252 inputs and 10 class capsules of 16 dimensions, with 3 iterations. The class output is the index of the longest class capsule.

`done` pulses when routing ends. `v_out` (10 x 16 values) and `class_out` then hold the result until the next start.

## Numbers

- **Activations and weights** are 16-bit two's complement with 10 fraction bits (Q5.10, range ±32).
- **Accumulators and routing values** (logits, predictions, squash inputs, outputs) are 32-bit with the same 10 fraction bits.
- Every product is rounded half up back to 10 fraction bits, and every narrowing saturates.
- `caps_pkg` holds these types and the rounding and saturation helpers. It also holds the layer-configuration struct `conv_cfg_t` and the PE-ownership enum.

The paper says only "16-bit". The position of the binary point is this design's choice.

## Memories and how to load them

Every on-chip memory is an `onchip_ram`: one write port and one synchronous read port with 1-cycle latency. The host writes them while the accelerator is idle, one word per cycle.

| memory | host select | default size | contents |
|---|---|---|---|
| weights | `host_mem=0` | 1024 kernels x 81 words | surviving kernels, back to back |
| index | `host_mem=1` | 16384 words | one list per output channel |
| activations | `host_mem=2` | image + both feature maps | see below |
| routing weights | `host_r_we` | 252·16 words of 1280 bits | W for one (capsule, output dimension) |

**Index lists.** Each output channel has one list: a count `n`, followed by the `n` input-channel numbers whose kernels survive. The lists of one layer follow each other in output-channel order.

**Kernels.** The kernels of one layer lie in the weight RAM in the same order as the index lists, each row-major over 81 words. Conv1's lists and kernels start at address 0. PrimaryCaps' lists and kernels start at `l2_idx_base` and `l2_w_base`.

**Activations.** Feature maps are channel-major, then row-major:
- the image is at 0;
- the Conv1 output is at `A1 = 28·28`;
- the PrimaryCaps output is at `A2 = A1 + 256·20·20`.

**Capsules.** Primary capsule `i = t·36 + p` (type `t`, position `p`) is made of PrimaryCaps channels `t·8 … t·8+7` at position `p`.

**Routing weights.** Routing-weight word `i·16 + k` holds `W[i][j][k][d]` in bits `[(j·8+d)·16 +: 16]`, for the 10 classes `j` and the 8 input dimensions `d`.

**Read-back.** While idle, `host_raddr`/`host_rdata` read the activation RAM. That is how the testbenches compare every intermediate feature map.

Pruning is entirely a matter of what is loaded:
- A channel with count 0 produces an all-zero map (after ReLU for Conv1).
- PrimaryCaps channels that are all zero give zero capsules.
- A zero capsule has zero predictions, so it does not influence routing.

The default top is built for 7 surviving capsule types, the MNIST configuration. The parameter `N_PTYPE` sets the number of types: the F-MNIST network of the paper (432 capsules) needs `N_PTYPE=12`.

## The pruned convolution

`conv_module` computes one layer from `conv_cfg_t`: sizes, stride, ReLU and base addresses. `process_control_unit` supplies Conv1's configuration, then PrimaryCaps'.

The loop nest is:

```
for oc in output channels:              index_control loads oc's list (cnt + 2 cycles)
  for oy in output rows:
    for group of N_PE=10 neighbouring output pixels ox0..ox0+9:
      clear the output buffer
      for n in surviving kernels of oc:        (pruned kernels never appear)
        for ky in 0..8:
          load one kernel row (9 words) into the kernel buffer
          load the input row segment (Ls = 9·stride + 9 words: 18 or 27) into the data buffer
          PE p gets the kernel row and the 9 inputs of pixel ox0+p (stride applied)
          add the 10 PE sums into the output buffer
      write the group through the activation module (ReLU, saturate)
```

`index_control` turns the loop counters into addresses:
- kernel `kbase + n·81 + ky·9 + kx`;
- input `in_base + list[n]·in_h·in_w + iy·in_w + ix`;
- output `out_base + oc·out_h·out_w + oy·out_w + ox`.

The last group of a row may hold fewer than 10 pixels: 6 pixels in PrimaryCaps, since the maps are 6 wide. Only those pixels are written.

One layer takes

    1 + Σ_oc (cnt + 3) + Σ_groups (1 + cnt·9·(Ls + 4) + n_valid)

cycles. Each term is checked by the testbenches:
- `cnt` is the number of surviving kernels of the channel;
- `Ls + 4` covers the data-buffer load plus drain, issue and the 2-cycle PE latency;
- `n_valid` counts the write-back cycles.

Every kernel row costs 22 cycles (Conv1) or 31 cycles (PrimaryCaps) for 90 useful multiplications. This is because the activation RAM delivers one word per cycle. It dominates the run time (next section but one).

## Dynamic routing

`routing_module` runs the routing algorithm over `N_IN` primary capsules. Class capsule `j` is handled by PE `j` throughout, which is why the design requires `N_PE = N_CLASS`.

The steps:
1. **Primary squash.** Each 8-D primary capsule is read from the activation RAM and squashed. This step comes from the original CapsNet.
2. **Matmul.** For each capsule `i`, the prediction vectors `û_j|i = W_ij·u_i` are computed: 16 PE passes of 8 products each. The predictions are stored in the prediction buffer, and the logits `b_ij` are cleared.
3. **Softmax.** Each capsule's 10 logits become coupling coefficients `c_ij` through `softmax_unit`, which accepts one capsule per cycle.
4. **Fully connected.** `s_j = Σ_i c_ij·û_j|i` is computed nine capsules at a time on the PE lanes, accumulated in 32 bits.
5. **Squash.** `squash_unit` squashes each `s_j` (16-D) to `v_j`.
6. **Agreement.** `b_ij += û_j|i · v_j` is computed over 16 dimensions in two PE passes (9 + 7 lanes). It is skipped after the last iteration.

Steps 3–6 repeat 3 times. Counters report the routing passes with agreement, the agreement updates, the squash operations and the FC chunks with fewer than 9 capsules.

## The non-linear units

- **`fx_exp`**: exp in 7 pipeline stages, one result per cycle.
  - It splits `x = k·ln2 + r` with `0 ≤ r < ln2`.
  - It evaluates `e^r` by Horner's rule with the Q16 coefficients `65536, 65543, 32696, 11180, 2289, 900`. These are e^0.5 × (0.60653, 0.60659, 0.30260, 0.10347, 0.02118, 0.00833).
  - It then shifts by `k`.
  - Without the range reduction, the polynomial would be accurate only near 0.5. Logits and squash ratios span several units, so the range reduction is this design's addition.
- **`fx_log`**: natural log in 7 pipeline stages.
  - A leading-one detector gives the integer part `k·ln2`.
  - A fifth-order polynomial gives `ln(1+m)` of the normalised mantissa.
  - log of 0 is a large negative constant, so a later exp gives 0.
- **`fx_div`**: `a/b = ±exp(log|a| − log|b|)`, with latency 15. The two logs and the exp are pipelined together, with sign and zero flags alongside.
- **`fx_sqrt`**: a restoring square root, one bit per cycle. `done` comes 22 cycles after `start`.
- **`squash_unit`**: `v = |s|²/(1+|s|²) · s/|s|`.
  - It first sums `|s|²` over `n_dim` cycles.
  - It then starts `sqrt(|s|²)` and the division `|s|²/(1+|s|²)` in parallel.
  - Last, it streams the `n_dim` divisions `(s_k·f)/|s|` through its one divider.
  - A 16-D squash takes 16 + 1 + 23 + 16 + 15 + 1 = 72 cycles.
- **`softmax_unit`**: ten exp lanes, a saturating adder tree, 11 log lanes, a subtraction and ten exp lanes: `c_j = exp(log e^{b_j} − log Σ e^{b})`. It has latency 23 and accepts a new capsule every cycle.

## Timing at the default size

One MNIST image, with the random pruned network of `tb_fastcaps_full` (475 surviving kernels), takes **2.31 million cycles**:
- about 1.85 M for Conv1;
- about 0.43 M for PrimaryCaps;
- about 30 thousand for routing.

The published accelerator reports 0.74 ms per image. This design would need about 23 ms at 100 MHz. The gap is almost all in Conv1: its 256 channels x 400 pixels x 9 kernel rows each pay the 18-word reload of the data buffer. A wider activation memory, or keeping the data buffer across output channels, would remove most of it. Neither is built.

Routing, measured in the same run over all 3 iterations, beside the per-step latencies published for the HLS build of the pruned MNIST network (the publication does not say whether its figures are per iteration or in total):

| step | this RTL (cycles) | published, optimised (cycles) |
|---|---|---|
| primary-capsule squash (252 x 8-D) | 16632 | not given |
| Matmul (prediction vectors) | 5040 | not given |
| Softmax | 828 | 3924 |
| Fully Connected | 2436 | 7360 |
| Squash (10 x 16-D, per iteration x 3) | 2190 | 1390 |
| Agreement | 2520 | 2886 |

The largest routing cost here is squashing the 252 primary capsules one at a time: 66 cycles each, including reading the 8 words, through the single `squash_unit`. The two full-size testbenches print this breakdown. They also check the two convolution phases against the formula above, plus the one cycle in which the process control unit registers `conv_start`.

## Where this design departs from the published accelerator

- **exp lanes.** The paper computes exp on the shared PE array. Here, the softmax and squash exponentials have their own multipliers, so routing never waits for the PE array to become free.
- **Unpublished methods.** log, sqrt, exp range reduction, rounding and saturation are not described in the paper. The methods above are this design's.
- **Agreement loop order.** The paper reorders the Agreement loops for its HLS tool. This design instead parallelises over the 10 classes, one PE each.
- **Output-buffer feedback.** The figure of the convolution module draws a path from the output buffer back to the data buffer. Here, every layer writes to the activation RAM and the next layer reads it from there.
- **Details taken from the original CapsNet.** Strides 1 and 2, the 3 routing iterations, the squash of the primary capsules and the absence of biases are not given by the paper.
- **Host interface.** The interface shown above is this design's. The published design sits behind a PYNQ host.
- **Memory sizes.** Default sizes are 1024 kernels and 16384 index words. The paper gives only its total BRAM use.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one compares the block with an independent model and checks its cycle count: the fixed latency of a pipelined unit, or the schedule of a sequenced one. It ends by printing `TB_RESULT checks=N failures=M`, and has a watchdog.

- **`tb_fastcaps_top`** runs the whole accelerator at reduced size:
  - 19x19 image, 4 Conv1 channels, 3 capsule types, 12 capsules;
  - one fully pruned channel per layer;
  - every activation checked bit for bit against a reference convolution;
  - class capsules checked against a floating-point routing model, within 0.04.

  It also fails unless each mechanism happened: skipped kernels, empty channels, partial pixel groups, ReLU clamping, agreement updates, primary and class squashes, and the PE-array hand-over.
- **`tb_fastcaps_full`** does the same at the default parameters (MNIST size). It simulates in under a minute.
- **`tb_fastcaps_fmnist`** does the same for the F-MNIST network: `N_PTYPE=12`, 432 primary capsules, 2.62 M cycles per image.

With verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_fastcaps_top \
    rtl/caps_pkg.sv $(ls rtl/*.sv | grep -v caps_pkg) tb/tb_fastcaps_top.sv -Mdir obj -o sim
obj/sim +verilator+rand+reset+2
```

To simulate a single block, replace the testbench name. The package must be read first.

Simulation has two states, so every register that is read is reset. The memory contents are not reset: they are written by the host before use.
