# A precision cascade for CNN inference: RTL

Most images are easy for a CNN to classify. This design takes advantage of that by running every image first through a very
narrow, fast datapath: 4-bit weights and activations. It then checks how confident that prediction is. Only the
images whose prediction looks doubtful are classified again by a slower, 8-bit datapath. Because the 4-bit unit handles the
whole workload at roughly twice the rate of the 8-bit one, and the 8-bit unit sees only a fraction of it, the pair beats a
single 8-bit accelerator of the same size at a chosen accuracy loss. The confidence check is what keeps the error bounded.

The architecture is the one described in *CascadeCNN: Pushing the Performance Limits of Quantisation in Convolutional
Neural Networks* (A. Kouris, S. I. Venieris, C.-S. Bouganis, DATE 2018). This RTL is an independent implementation of
that description. Where the publication is silent, this implementation had to choose, and the sections below say which
parts are its own.

## Parts of the cascade

| part | module | what it does |
|---|---|---|
| low-precision unit (LPU) | `mm_unit` (WL = 4, PACK = 1, W_SRC_WL = 8) | runs every layer for every sample at 4 bits |
| confidence evaluation unit (CEU) | `ceu` | scores the LPU prediction of each sample; pass or fail |
| cascade controller | `cascade_ctrl` | batch phases, list of failed samples, final labels |
| high-precision unit (HPU) | `mm_unit` (WL = 8) | re-runs the failed samples at 8 bits |
| top | `cascadecnn_top` | wires the above together; memory and host stay outside |

The off-chip memory and the host processor are outside the RTL. The host sequences the layers and computes softmax on the
last layer's scores. In the original system the FPGA is fully reconfigured between the LPU and the HPU. Here both units are
present, and a request/acknowledge pair (`reconfig_req`, `reconfig_done`) marks the switch.

## One batch, step by step

1. `batch_start` with `batch_size` puts the controller in the **LPU phase**. A start aimed at the HPU is ignored in this phase.
2. The host issues one matrix-product command per layer to the LPU (`lpu_cmd`, `lpu_start`, wait for `lpu_done`).
3. For each sample, in order, the host streams the softmax probabilities of the last layer into `prob_*`. One class per
   cycle; `prob_last` marks the last class. One cycle after the last beat the CEU reports `dec_pass`, the top-1 class and the score.
4. The controller records every label. It appends the index of each failing sample to a re-processing list.
5. When all samples are judged, the controller raises `reconfig_req`, unless no sample failed: then the batch is done.
   After `reconfig_done` it enters the **HPU phase**.
6. The failed sample indices come out on `hpu_id_valid/ready/hpu_id`. The host gathers those samples into a compact input
   matrix and runs the layers on the HPU. Then it streams the new probabilities, in the same order.
7. Each HPU-phase CEU result overwrites the label of the corresponding failed sample, whatever its pass/fail bit.
   After the last one, `batch_done` pulses. Labels are read through `lbl_idx`/`lbl_class`.

## The processing unit: every layer is a tiled matrix product

`mm_unit` executes CONV and FC layers in one way: as the product of an R x P activation matrix and a P x C weight matrix.

* **CONV layers.** Each row of the activation matrix holds one sliding-window position: the K_H·K_W window of all N_IN input
  channels, concatenated. So P = K_H·K_W·N_IN, and R is the number of window positions. Each weight column is one kernel,
  unrolled the same way, so C = N_OUT.
* **FC layers.** Each row is one sample of a batch (R = batch tile) and P is the input vector length.
* **Where the unrolling happens.** The host builds the unrolled (im2col) matrix in memory. The unit does not do it.

The product is tiled in all three dimensions with tile sizes T_R, T_P and T_C:

```
for each row tile r, column tile c:              -- one output tile
    for each p tile:                             -- a "P-step"
        load A[r, p] (T_R x T_P) and W[p, c] (T_P x T_C)   (double buffered)
        for rr in 0..T_R-1 (one per cycle):
            out[rr, 0..T_C-1] += A[rr, :] . W[:, 0..T_C-1]  (T_C PEs in parallel)
    write the output tile back
```

### Hardware mapping

* **PEs.** There are T_C processing elements (`pe`). Each holds one weight column and computes a full T_P-element dot product
  every cycle: T_P multipliers, then a binary adder tree with a register after every level.
  Its latency is 1 + log2(T_P) cycles.
* **Activation rows.** One activation row is read per cycle from `act_tile_buffer` and broadcast to all PEs.
  A P-step therefore issues its T_R rows on T_R consecutive cycles.
* **Accumulation.** The T_C dot products of a row enter `result_accum`, a T_R x T_C array of 32-bit accumulators. They are
  added to the stored row, or written over it on the first P-step of a tile. Partial sums never leave the chip.
* **Double buffering.** `act_tile_buffer` and `wgt_tile_buffer` each have two banks. While P-step *s* computes out of bank
  *s mod 2*, the two `tile_loader`s fill the other bank with the tiles of step *s+1*.
  A step ends when its own computation and the next step's loads have both finished. So a slow memory stalls the unit between
  steps, never within one.
* **P-step time.** max(T_R + 2 + log2 T_P, time to load the next tiles), plus two cycles of hand-over.
* **Write-back.** When a tile's last P-step is done, `result_writer` rescales the accumulators to the layer's output format
  and writes the tile back, packed. Computation waits during write-back, because there is only one results buffer.
* **Sequencing.** `mm_ctrl` walks this loop nest and computes all tile addresses.

Default tile sizes are this implementation's choice; the publication selects them per network and device by design-space
exploration and does not list them:

| unit | T_R | T_P | T_C | multipliers |
|---|---|---|---|---|
| LPU | 64 | 64 | 64 | 4096 (2048 DSP-style multipliers, two products each) |
| HPU | 64 | 64 | 32 | 2048 |

## What makes the low-precision unit fast

### Two multiplications per 25x18 multiplier (`dsp_dual_mult`)

At 5 bits or less, two products that share no operand fit in one 25x18 signed multiplier. With K = 17 − WL, the operands
are placed as:

```
A = a0 + a1·2^K          (25-bit port)
B = b0 + b1·2^K          (18-bit port)
A·B = a0·b0 + (a0·b1 + a1·b0)·2^K + a1·b1·2^(2K)
```

For WL = 4, K = 13. The three terms are separated by zero guard bits, so they can be pulled apart:

* **a0·b0** is the low 2·WL bits of the product, read as a signed number.
* **The middle term** is the next K bits, read as signed, once a0·b0 has been subtracted.
* **a1·b1** is what remains above 2K, once the middle term has also been subtracted.

The subtractions undo the borrows that negative terms cause. For WL = 4 and WL = 5, the testbench checks every operand
combination, or a large random sample of them.

In the LPU, every pair of neighbouring multipliers in a PE shares one such unit. Whether a multiplier ends up in a DSP block or
in LUTs is left to the FPGA tools.

### One stored model for both units (`requant` in `tile_loader`)

Values are dynamic fixed point. Every layer has its own binary-point position (scale) for weights and for activations,
while the wordlength is the same for the whole network. Weights are stored only once, at the HPU's 8 bits. When the LPU
loads a weight tile, each 8-bit lane is shifted right by the command's `w_shift` and saturated to 4 bits, so the LPU model is
derived on the fly. The same rescaling (`o_shift`) turns 32-bit accumulators into output activations of the layer's wordlength.

Rescaling truncates toward minus infinity and saturates at the extreme codes. Both are this implementation's choices.

## Deciding confidence (`ceu`)

The CEU sorts the class probabilities p_1 ≥ p_2 ≥ … and computes a generalised best-versus-second-best margin:

```
gBvSB<M,N> = (p_1 + … + p_M) − (p_{M+1} + … + p_N)
```

The prediction passes when gBvSB ≥ th. M, N and th are run-time inputs. The reference setting in the publication is
M = 5, N = 10, with th tuned on a small labelled set to meet an error budget.

How this implementation computes it:

* **Input format.** Probabilities are unsigned 16-bit fractions, one per cycle.
* **Top-N selection.** An insertion register file keeps the NMAX = 10 largest values and their classes. Each new value is
  compared with all entries at once and shifted in at its rank; ties keep the earlier class.
* **Result timing.** The score is formed from the list that already includes the last value. The result is therefore ready
  one cycle after `prob_last`, and the next sample may follow at once.

The publication runs this check (and softmax) in software on the SoC's ARM core, yet draws the CEU as a unit of the
generated system. Here it is hardware; softmax stays on the host.

## Memory layout and commands

* **Memory word.** 64 bits wide. A word packs 64/WL values, element *i* in bits [i·WL +: WL].
* **Addresses.** Counted in words.
* **Command.** `mm_cmd_t` (in `cascade_pkg`) describes one layer: base addresses of A, W and the output, R, P, C and the
  two shifts.

| matrix | layout | element (i, j) at bit offset |
|---|---|---|
| activations A (R x P) | row-major, WL-bit | (i·P + j)·WL |
| weights (stored as C x P, one kernel per row) | row-major, W_SRC_WL-bit | (i·P + j)·W_SRC_WL |
| outputs (R x C) | row-major, WL-bit | (i·C + j)·WL |

R, P and C must be multiples of T_R, T_P and T_C. The host pads with zeros; zero rows and columns do not change the
result. T_P·WL, T_P·W_SRC_WL and T_C·WL must be multiples of 64.

Memory ports use valid/ready handshakes:

* **Reads.** One address per accepted request. Data comes back in order on `*_rsp_valid`, and the response is never
  back-pressured.
* **Writes.** Address and data travel together.
* **Port count.** Each unit has an activation read port, a weight read port and an output write port.

## Parameters of `cascadecnn_top`

| parameter | default | origin |
|---|---|---|
| WL_LPU | 4 | the wordlength chosen for the LPU in the publication |
| WL_HPU | 8 | the publication's zero-error baseline precision |
| L_TR, L_TP, L_TC | 64, 64, 64 | own choice |
| H_TR, H_TP, H_TC | 64, 64, 32 | own choice |
| BATCH | 1024 | own choice: labels and fail list stored per batch |
| NCLS | 1000 | ImageNet classes |
| PW | 16 | own choice: probability width |
| NMAX | 10 | largest N of gBvSB supported |

Which networks the defaults hold, layer by layer:

* **VGG-16 and AlexNet layer sizes.** Every layer fits the 16-bit R/P/C fields and the 32-bit accumulator at 8 bits.
  The largest cases: R = 50176 for VGG conv1, P = 25088 for fc6.
* **A 16-bit HPU.** Needs a wider accumulator (`ACCW` of `mm_unit`).
* **6- or 7-bit HPUs.** Those precisions do not divide 64, and the loader packs only wordlengths that do.

## How far to trust it, and where it departs

Followed from the publication:

* the LPU → CEU → HPU cascade and the batch order: LPU for the whole batch, then HPU for the failed samples;
* layers as matrix products;
* the loop order of the tiled multiplication;
* the PE as a multiplier array plus adder tree;
* T_C PEs sharing one broadcast activation row and processing T_R rows in a pipeline;
* double-buffered tile loading;
* on-chip accumulation of the output tile;
* 64-bit packing of low-precision values;
* two ≤5-bit multiplications per 25x18 DSP;
* derivation of the LPU model from the HPU weights at run time;
* the gBvSB rule.

Chosen here because the publication does not specify them:

* tile sizes and batch store size;
* packing lane order and matrix layouts;
* guard-bit placement and extraction in the packed multiplier;
* rounding (truncation) and saturation;
* the probability format;
* top-N by insertion;
* all handshakes and the command format;
* asynchronous active-low reset of control state (data arrays are not reset);
* no overlap of write-back with computation;
* the requirement that matrix sizes be tile multiples.

Not present:

* **Reconfiguration.** Both units exist side by side instead of time-sharing the FPGA.
* **Non-linearities and pooling.** ReLU and pooling layers are not described in the publication and are not built.
* **Host software.** im2col, softmax, layer sequencing, and the design-space exploration that picks tile sizes and
  wordlengths all belong to it. So does the batch tiling of FC layers: a batch larger than the FC row count the host
  wants is run through the LPU layer by layer in groups of T_Batch samples, by issuing one command per group.
  Overlapping the host's softmax of one batch with the next batch's LPU work is likewise a host schedule.
* **Performance.** Throughput figures depend on an FPGA implementation and were not reproduced. The defaults give the LPU
  4096 and the HPU 2048 multipliers per cycle. By comparison, the reported 8-bit VGG-16 rate of 680.91 GOp/s at 150 MHz
  corresponds to about 2270 MACCs per cycle.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=N failures=M` and stops.

* **Shared behavioural models.** `tb/mem_model.sv` models one unit's memory ports, with random stalls and fixed read
  latency. `tb/mm_unit_harness.sv` runs random layers through one `mm_unit` against an integer reference.
* **Unit level.** `tb_mm_unit` exercises an LPU-style and an HPU-style unit with small tiles.
* **End to end.** `tb_cascadecnn_top` takes a batch of 12 samples through the whole cascade with small tiles.
  It checks every output word of both units, every CEU score and decision, the re-processing list and all final labels.
  It also requires each mechanism to occur at least once: memory stalls, loads overlapping computation, packed products,
  saturation, pass and fail, the switch to the HPU, re-processing, and refusal of a start for the inactive unit.
* **Convolution layers.** `tb_conv_layer` runs two real convolutions on units with the default tile sizes. One is a
  VGG-16 style 3x3 layer with 64 to 64 channels on the 8-bit unit. The other is an AlexNet conv1 style 11x11, stride-4
  layer on the 4-bit unit; its P = 363 is padded to 384. The testbench builds the unrolled matrix and checks every output
  against a direct convolution. It also prints the achieved MACCs per cycle. With one 64-bit word per cycle on each memory
  port, loading the next tiles dominates these small layers.
* **Full size.** `tb_cascadecnn_full` is the same run at the default parameters: 64 samples, 128 features (two P-steps), 64 classes.

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/cascade_pkg.sv \
          tb/tb_cascadecnn_top.sv --top-module tb_cascadecnn_top -Mdir obj -o sim
obj/sim
```

Replace the testbench name to run another one. The full-size testbench needs a few minutes to compile, because the two
units hold 6144 multipliers.
