# H2Learn: an accelerator for BPTT training of spiking neural networks

Training a spiking neural network (SNN) with back-propagation through time (BPTT)
produces three kinds of work per layer and timestep. Each has its own structure:

* **Forward pass.** A convolution of *binary* spikes with FP16 weights, followed by a
  leaky integrate-and-fire (LIF) update of the membrane potential.
* **Backward pass.** An FP16 convolution of potential gradients with the rotated kernel.
  Both its inputs and its outputs are mostly zero:
  * the potential gradients are sparse;
  * a spike gradient only matters where the surrogate-gradient mask is 1.
* **Weight update.** A convolution of FP16 potential gradients with *binary* spikes,
  summed over the timesteps.

The design has one engine per kind of work, plus a controller that overlaps them across
sub-batches:

| Engine | Array (default) | Key idea |
|---|---|---|
| Forward Engine (`forward_engine`) | 64 x 16 LUT PEs, 4 tiles in parallel | A spike window is the address into a table of precomputed partial sums. No multipliers, and several input points are summed in one read. |
| Backward Engine (`backward_engine`) | 16 x 64 groups of 4 PEs | Only MACs whose output is unmasked *and* whose input is non-zero are issued. |
| Weight Update Engine (`weight_update_engine`) | 10 x 128 LUT PEs, 4 tiles in parallel | Same LUT trick, with gradients in the table and spikes as the address. |
| `pipeline_ctrl` | — | Runs the forward pass of sub-batch k+1 while the backward pass and weight update of sub-batch k run. |

All datapaths use IEEE half precision (FP16). The helper functions in `h2l_pkg` round to
nearest even, flush subnormals to zero and saturate to infinity.

## Tensors and tiles

* Feature maps are cut into 8x8 tiles. A binary tile is 64 bits; an FP16 tile is 64 values.
* A Backward Engine input tile carries a one-element halo, so it is 10x10 for a 3x3 kernel.
* Element (r, c) of a tile has index `r*8+c`.
* Every spike window is ordered row-major, with the first element in the most significant bit.

## Forward Engine: convolution by table lookup

A 3x3 kernel is split into three rows of three weights, one per *sub-LUT*.

* **Contents.** A sub-LUT has 8 entries. Entry `a` holds the sum of the weights whose bit
  is set in `a`:
  * address `100` gives the first weight, `010` the second, `001` the third;
  * `111` gives all three.
* **One read.** The spike window of one output point (9 bits) reads the three sub-LUTs.
  The Acc adds the three values, and that sum is the whole 3x3 dot product.
* **Building the table.** `lut_pe` is loaded with the three single weights of each
  sub-LUT, at the one-hot addresses. It then fills the other entries itself with one FP16
  adder:
  * one entry per cycle, 24 cycles in all;
  * `entry[a] = entry[a & (a-1)] + entry[a & -a]`.
* **Parallel reads.** Each sub-LUT has P = 4 read ports, so four output points (four
  tiles) are read in the same cycle.

**The PE array.** Row r holds the kernels of input channel r, and all PEs of a row share
that channel's spike windows. Column c holds output channel c.

**Column units.** Each column has an Acc (`lut_acc`):
* a balanced FP16 adder tree over 64 rows x 3 sub-LUTs, one tree per lane;
* an accumulator that stays on the output across grid iterations (`first` ... `last`),
  one grid iteration per group of 64 input channels.

After the last grid iteration the column's `soma` computes:
* `u = ps + (s_prev ? 0 : alpha*u_prev)`;
* the spike `u >= th_f`;
* the gradient mask `th_l < u < th_r`;
* a compressed copy of the potentials that carries only the masked-in ones. The backward
  pass needs no others.

**FC mode.** With `fc_mode` set, every sub-LUT acts as a plain weight buffer. Sub-LUT k
outputs `entry[fc_addr]` when spike bit k of the lane is 1, and 0 otherwise.

**Latency.** Beat to soma output is 3 cycles, and one beat can be issued every cycle.

## Backward Engine: two kinds of sparsity

Each column of PE groups produces one 8x8 tile of potential gradients for one output
channel. The work goes through five stages.

1. **Effectual Output Finder** (`eff_o_finder`, one per column).
   * It scans the 64-bit spike-gradient mask, one position per cycle.
   * It deals the positions of the set bits round-robin into G = 4 Output ID Buffers,
     one per PE of a group. Each PE therefore gets an equal share of the outputs that
     need computing.
   * At the same time it decompresses the potentials from the compressed stream.
   * The scan **stalls** while the stream offers no value for a masked-in position. This
     is a valid/ready handshake.
2. **Effectual Input-and-Output Finder** (`eff_io_finder`, one per PE).
   * For each output ID it forms a 9-bit *tag*: the non-zero mask of the 3x3 window of
     input gradients.
   * A priority encoder emits one instruction per cycle for each set tag bit: output ID
     (6 bits), weight ID (4 bits), input ID (row 4 bits, column 4 bits).
   * An all-zero tag costs one idle cycle. All other ineffective MACs are never issued.
3. **PE** (`be_pe`).
   * It executes `ps[out] += w[wid] * g[in]`.
   * The multiply and the add are separately rounded. The 64 partial sums are held in
     registers.
4. **Acc** (`be_acc`, one per column).
   * After all groups finish, the 64 elements are read out one per cycle.
   * It adds the 64 PE outputs of the column (16 rows x 4 PEs).
   * It accumulates over grid iterations, one per group of 16 input channels.
5. **Grad** (`grad`, one per column). On the last grid iteration it computes
   * `ds = ps - alpha*du_next*u`;
   * `du = (s ? 0 : alpha*du_next) + (mask ? beta : 0) * ds`;
   * and outputs `du`, its non-zero flag (the next layer's input sparsity) and
     `alpha*du` (needed at timestep t-1).

**Iteration phases.** A grid iteration runs three phases one after another: scan (only on
the first iteration of a tile), MAC, and accumulate. The MAC phase ends when the slowest
PE group is done.

**Kernel orientation.** The kernel is expected already rotated by 180 degrees, so weight
ID `dr*3+dc` pairs with input `(r+dr, c+dc)` of the haloed tile.

## Weight Update Engine

`grad_w[i][j] = sum_t grad_u_t[j] * s_t[i]` has a binary operand, so the LUT scheme
applies again, with the roles swapped:

* The PE at (timestep t, column c) holds two 16-entry sub-LUTs. They contain the subset
  sums of a 1x8 window of `grad_u_t` for output channel c.
* An 8-bit spike window of `s_t` addresses them.
* The column Acc sums over the 10 timesteps and over the sliding windows (the beats).

On the last beat of an accumulation the engine outputs:
* `dw = acc + dw_prev` (the gradient stored back to memory);
* `w_new = w - dw` when `apply` is set, which happens on the last sub-batch of a batch
  group. Any learning rate is expected to be folded into the gradients.

**Latency.** 3 cycles, as in the Forward Engine.

## Pipeline controller

`pipeline_ctrl` runs stages k = 0 .. N for N sub-batches:

* The forward side runs sub-batch k, layers 0 .. L-1, and writes external memory `k mod 2`.
* The backward side runs sub-batch k-1, layers L-1 .. 0, and reads the other memory. At
  each layer it runs the Weight Update Engine; at every layer except layer 0 it also runs
  the Backward Engine.
* `bw_apply` marks the last sub-batch of each batch group, and the final sub-batch.
* A stage ends when both sides are done.
* Each step is a start/done handshake with whatever drives the engines.

## What is not in the RTL

* **Global buffers and external memory system.** The global buffers (503 KB, 2684 KB and
  4840.5 KB) are known only by their size and double buffering. The external memories are
  off-chip. Instead, every engine has load ports (`*_wr_*`, `be_w_*`, `be_ut_*`,
  `be_adu_*`) and streaming ports at the top, and a memory system or testbench drives them.
* **Backward Engine FC mode.** The mode in which the finders are bypassed for FC layers is
  not built. As a result, the backward pass of the fully connected layers of the evaluated
  networks cannot run.
* **Stride 2.** Strided convolutions in the backward pass are not supported: input-ID
  decoding assumes stride 1.
* **Pooling.** Average pooling is not placed in any engine.

## Departures and choices

* **Firing rule.** The firing comparison is `u >= th_f`. One description of the
  algorithm states it that way; a figure prints `>`.
* **Where the LUT is built.** LUT contents are built inside each PE. Where the partial
  sums are computed is not specified.
* **Acc schedule.** Output-stationary Acc registers are used. The Backward Engine Acc
  handles one element per cycle.
* **Phase sequencing and handshakes.** Strict phase sequencing in the Backward Engine, a
  stage barrier in the controller, and the valid/ready handshake on the compressed
  potentials are all choices of this implementation.

## Sizes and build cost

Parameters default to the full configuration: FE 64x16, BE 16x64x4, WUE 10x128, P = 4.
The top holds about 38,000 FP16 adders. Verilator lint of the full top takes about
10 GB and 10 minutes.

## Simulating

Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` and has a watchdog. FP16 reference values are computed
with `real` arithmetic and rounded by `tb_fp16_pkg`. An example:

```
verilator --binary --timing --assert -y rtl -y tb rtl/h2l_pkg.sv tb/tb_fp16_pkg.sv \
          tb/tb_backward_engine.sv --top-module tb_backward_engine
./obj_dir/Vtb_backward_engine
```

* **Engine testbenches** run at reduced array sizes, set through their parameters.
* **`tb_h2learn`** runs the whole top at 2x2 engine arrays. A controller-driven job covers
  2 layers, 5 sub-batches and batch groups of 2, followed by one FC-mode pass. It counts
  each mechanism and fails if one never occurs:
  * LUT builds;
  * forward/backward overlap;
  * both memories in use;
  * Backward Engine skipped at layer 0;
  * weight update applied and withheld;
  * Output Finder stalls;
  * zero input gradients skipped;
  * FC mode.
* **Full size.** No testbench simulates the top at full size. The largest simulated
  configuration is the full-size unit (PE, Acc, Grad, finders) inside the reduced engines.
  A full-size top model is very large to build for simulation.
