# A sparse systolic tensor array with time-unrolled variable block sparsity

Pruned CNN weights only save time and energy if the hardware can skip the
zeros without losing its regular, systolic data movement. This design gets
there by constraining where the zeros may be. Along the reduction dimension
K, every block of 8 consecutive weights of an output channel may hold at most
NNZ non-zeros, where NNZ runs from 1 to 8. This format is called *variable
density-bound block* (VDBB) sparsity.

The array handles one non-zero weight of a block per cycle. It holds the
block's 8 activations in place for NNZ cycles, and a small multiplexer in
front of each multiplier picks the activation that the current weight
belongs to. A block therefore costs NNZ cycles instead of 8, at full
utilisation of every multiplier, whatever NNZ a layer was pruned to. NNZ is
a per-job setting, not a property of the silicon. A layer at 3/8 density
runs 8/3 times faster than a dense one, and a dense layer still runs, at
NNZ = 8.

The second idea addresses activation bandwidth. A 3x3 convolution lowered to
a matrix multiply (im2col) reads each input pixel up to nine times. This
design instead reads plain pixels from SRAM and expands them into im2col
rows in a small unit right in front of the array. That unit reads the SRAM
three times less often than a software im2col would.

The RTL is SystemVerilog-2017 and synthesizable. The default parameters
give the 4x8x8_4x8 configuration of 1024 INT8 MACs:

- a 4x8 grid of tensor PEs with 4x8 MACs each,
- 2 MB of activation SRAM,
- 0.5 MB of weight SRAM,
- a 64 KB program store for the control processors.

At 1 GHz and NNZ = 4 this is a nominal 4 TOPS of dense-equivalent work.

## 1. The VDBB weight format

A weight matrix W of size K x Ncols is cut along K into blocks of BZ = 8.
Each block of each column is stored in two parts:

- **values**: its non-zeros in increasing position order, padded with
  *padding slots* up to exactly NNZ entries. A padding slot may hold
  anything, because the hardware forces it to zero.
- **mask**: an 8-bit mask M in which bit i set means that element i of
  the block is non-zero.

Time unrolling turns "the r-th non-zero of the block" into a cycle. On
cycle r of a block, every weight lane looks up the position of the r-th set
bit of its mask (`dbb_index_decoder`). If the mask has fewer than r+1 set
bits, the slot is padding: the decoder reports *not found*, and the weight
entering the array becomes zero.

For convolutions, K runs over channels innermost. A block is therefore
8 channels of the same kernel tap, so the 9 taps of a 3x3 kernel always
fall in different blocks.

## 2. The MAC: S8DP1

`s8dp1` is one multiplier with its own 32-bit accumulator. In front of it
sits an 8:1 multiplexer over the 8 INT8 activations of the current block.

- On each valid cycle it adds act[idx] x w to the accumulator, where idx
  is the weight's in-block position.
- If either operand is zero, the accumulator does not update. This is the
  clock-gating point: the paper gates the MAC lane's clock, and the RTL
  models it as an enable and reports it on `gated_o`.
- On the tile's last cycle the caller takes the final sum (accumulator
  plus the current product), and the accumulator restarts at zero. The next
  tile can therefore follow without a dead cycle.

## 3. The tensor PE and the array

A `tpe` is an A x C = 4 x 8 grid of S8DP1 units:

- Its A x BZ activation tensor (4 GEMM rows, 8 elements each) is shared
  along C.
- Its C compressed weights (value plus position, one per output column)
  are shared along A.
- Activations are registered and passed to the right-hand neighbour.
  Weights, together with `valid` and `last`, are registered and passed to
  the TPE below.
- When a tile finishes, each TPE captures its A x C sums into a result
  register.

`sta_array` is an M x N = 4 x 8 grid of TPEs, output stationary:
accumulators stay put and the operands move.

- Edge skew: TPE row i's activations enter i cycles late, and TPE column
  j's weights enter j cycles late. TPE (i, j) therefore sees the data of
  cycle t at cycle t + i + j.
- The activation block of row i is held at the edge for NNZ cycles while
  that many weights pass.
- The far corner finishes M + N - 2 cycles after the last edge cycle.
- The result registers then form a shift chain to the left. In N shift
  cycles, the columns leave through column 0, one TPE column (a
  16 x 8 block of INT32 results) per cycle.

## 4. The IM2COL unit

`im2col_unit` is the least obvious part of the design. It works on a patch
of 6 rows x 4 columns of input pixels, each pixel a vector of 8 channels.
That patch contains the eight 3x3 windows of a 4 (vertical) x 2
(horizontal) group of output pixels.

- The SRAM delivers one patch column (6 pixels) per read, and a patch
  needs 4 reads.
- The unit emits one kernel tap per *step*. A step covers all 8 windows:
  two groups of 4 pixel vectors, which feed two TPE rows (4 GEMM rows
  each).
- Nine steps cover the kernel, so 24 pixels read become 72 pixel
  vectors delivered, a 3x reduction.

Step s covers kernel column kx = s / 3 and kernel row ky = s % 3. Window
v of group g needs the pixel at patch row v + ky, patch column g + kx.

Storage is two register columns, X and Y (the 6x2 buffer), plus the SRAM
output S. The SRAM output holds its data between reads, so it acts as a
third column:

| step | group 0 reads | group 1 reads | at the end of the step |
|---|---|---|---|
| 0, 1, 2 | X (col 0) | S (col 1) | after 2: Y <- S, read col 2 |
| 3, 4, 5 | Y (col 1) | S (col 2) | after 5: X <- S, read col 3 |
| 6 | X (col 2) | S (col 3) | Y <- S, read col 0 of the next patch |
| 7, 8 | X (col 2) | Y (col 3) | after 8: X <- S, read col 1 of the next patch |

Three properties follow from this schedule:

- Reads come at consecutive addresses, four per nine steps.
- At most one register column is loaded per step.
- A step can last any number of cycles. In the accelerator it lasts NNZ
  cycles, because one step is one K block.

Starting up takes two cycles: restart plus read column 0, then one advance
that loads X and reads column 1. After that, the unit runs without
interruption from one patch to the next.

The accelerator has M/2 = 2 units. Unit u feeds TPE rows 2u (window column
0) and 2u+1 (window column 1). One array tile is therefore 4 x 4 output
pixels:

- the 4 vertical window positions,
- times 2 window columns,
- times 2 units, which sit 2 pixel columns apart.

Inputs with more than 8 channels are processed as successive 9-step
chunks, one per 8-channel group. The K order is (chunk, step, channel).

Zero padding at image borders is not done by the unit. The host stores the
padded image. The border zeros still take their cycles, but clock gating
keeps them from costing MAC energy.

## 5. Buffers and data layout

Both local SRAMs are double buffered. The array owns the bank named by
`*_bank_sel_i`, and the host (the MCU cluster with its DMA) owns the other.
Flipping the select swaps the banks between jobs. Every bank is a
single-port synchronous SRAM model with one cycle of read latency, whose
read data stays valid until the next read. The controller depends on that
hold.

**Activation buffer.** 2 MB, as 2 banks x 8192 words x 1024 bits. One word
feeds the whole array edge for one block. The byte layout depends on the
mode:

| Mode | Byte of an AB word | Meaning |
|---|---|---|
| bypass | (i·A + a)·8 + k | element k of the current K block, GEMM row a of TPE row i |
| IM2COL | u·48 + p·8 + ch | channel ch of patch row p in the current patch column of unit u |

Word addresses:

- **bypass**: `ab_base + tm·stride + b` for row tile tm and block b.
- **IM2COL**: `ab_base + tm·stride + 4·chunk + column`. Each tile performs
  one extra read, of the next address, which is never used.

**Weight buffer.** 0.5 MB, split into a value array and a mask array, each
of 2 banks x 2048 rows x 512 bits. Byte j·8 + c of a row belongs to GEMM
column tn·64 + j·8 + c, where j is the TPE column and c the lane. For
column tile tn:

- the value row of block b, non-zero r sits at
  `wb_base + (tn·K + b)·NNZ + r`;
- the mask row of block b sits at `msk_base + tn·K + b`.

The two arrays have separate ports, so the next block's mask can be read
while values stream every cycle.

## 6. Running a job

`array_controller` is configured with one `gemm_cfg_t` record:

| Field | Meaning |
|---|---|
| `nnz` | NNZ of the job, 1 to 8 |
| `im2col_en` | IM2COL on (1) or bypass (0) |
| `k_blocks` | K, in blocks of 8 |
| `ab_base`, `ab_tile_stride` | first activation word, and words per row tile |
| `wb_base`, `msk_base` | first value row and first mask row |
| `tiles_m`, `tiles_n` | number of 16-row and 64-column output tiles |

A pulse on `start_i` runs the tiles in row-major order: all N-tiles of
M-tile 0, then all N-tiles of M-tile 1, and so on. Each tile goes through
these states:

```
PRIME0  1 cycle      IM2COL: restart units, read patch column 0
PRIME1  1 cycle      first value row and mask row; first activation word or IM2COL step
STREAM  K*NNZ        valid to the array; next mask row / activation at each block end
FLUSH   M+N-2        skewed data reaches the far corner
DRAIN   N            res_valid_o, res_col_o = 0..N-1, res_data_o = that TPE column
```

A tile therefore takes exactly 2 + K·NNZ + (M+N−2) + N cycles, which is
2 + K·NNZ + 18 at the default size. `done_o` pulses after the last drain.

`res_data_o[i][a][c]` on drain cycle t is output (tm·16 + 4i + a,
tn·64 + 8t + c).

The drain of a tile is not overlapped with the streaming of the next one.
For a deep K this overhead is small: at K·NNZ = 500 it costs about 4 %.

## 7. Top level

`vdbb_accelerator` connects these blocks:

- the controller;
- the two buffers;
- the two IM2COL units, with a bypass multiplexer;
- 64 mask decoders, one per weight lane;
- the array;
- the program store.

The paper's design also contains Arm Cortex-M33 MCUs and an AXI DMA port.
The MCUs do data movement, control and post-processing (requantisation,
pooling, activation functions) in software. They are not part of this RTL.
Their connections appear as top-level ports:

- the host ports of the two buffers,
- the program-store port,
- the job start, configuration and done signals,
- the result stream.

A generate-time check rejects geometries the IM2COL wiring cannot serve:
A must be 4, M must be even, and M/2 patch columns must fit in an AB word.

## 8. Where this RTL departs from the paper, or fills gaps

- **Configuration.** The summary table gives the best design as
  4x8x8_4x8 with VDBB and IM2COL. One figure caption calls the VDBB design
  4x8x4_8x8. The RTL follows the table.
- **IM2COL unit count.** The block diagram draws one IM2COL unit per array
  row. Here one unit serves two TPE rows, because one patch yields two
  window columns. Only 3x3, stride-1 kernels are expanded in hardware. The
  paper also mentions a read saving for 5x5 kernels, which this unit does
  not provide; such layers, strided layers and 1x1 layers run in bypass.
- **IM2COL schedule.** The step order and the reuse of the SRAM output
  register as the third column are this design's own. The paper gives the
  6x4 patch, the small register buffer and the 3x reduction.
- **Mask encoding.** The mask-to-index decoding, the bit order of the mask
  and the padding of short blocks are not specified in the paper. The same
  goes for the split of the weight SRAM into value and mask arrays, both
  SRAM word widths, and all data layouts.
- **Clock gating.** Modelled as an accumulator enable on zero operands, not
  as gated clocks.
- **Results and control.** The paper does not say how results leave an
  output-stationary array, nor how tiles are sequenced; it leaves control
  to MCU software. The left-shift drain and the state machine are this
  design's choices.
- **MCU cluster.** Not built; see section 7. Layers that exceed a job must
  be split by software. One example is a fully connected layer whose K
  exceeds the 2048 value rows of a bank at the chosen NNZ. Partial sums
  from a job split along K are added outside the array, because
  accumulation across jobs is not built.
- **Memories.** The SRAMs are arrays with synchronous reads, not macros.
  Power and timing were not evaluated.

## 9. Capacity against the networks the paper evaluates

Layer shapes below are standard shapes for these networks, not taken from
the paper. NNZ per network is the paper's.

| Network | Largest layer | Per 64-column tile | Fits? |
|---|---|---|---|
| ResNet-50 (3/8) | 3x3x512→512, K = 576 blocks | 1728 value rows + 576 mask rows | yes, one tile per job (bank holds 2048 rows) |
| VGG-16 convolutions (3/8) | same shape as above | same | yes |
| MobileNetV1 pointwise (4/8) | 1024→1024 | 512 value rows | yes |
| LeNet-5 and the CIFAR ConvNet | — | a few KB | whole model fits in one bank |

Activations:

- Most activations fit in a 1 MB AB bank.
- VGG-16's 224x224x64 maps do not, and must be split into row bands.
- VGG-16's first fully connected layer (K = 25088, dense) needs splitting
  along K; see section 8.

## 10. Verification

Every module has a self-checking testbench. Each compares the module
against values computed independently in the testbench, counts checks and
failures, and has a watchdog.

| Testbench | What it checks |
|---|---|
| tb_s8dp1 | random blocks against a multiply-accumulate model, gating flags |
| tb_dbb_index_decoder | all 256 masks x 8 ranks, and the worked example of the format |
| tb_tpe | register timing of the operand pipelines, the result capture, the drain |
| tb_sta_array | full-size array GEMMs for NNZ = 1..8 and random NNZ; timing of the last row and the drain |
| tb_im2col_unit | every window pixel of 40 random patches at step lengths of 1 to 4 cycles; 4 reads per patch |
| tb_activation_buffer, tb_weight_buffer | full-size banks: host writes, bank swap, concurrent array reads, held read data, host read-back |
| tb_mcu_program_sram | byte-enable writes, read-back |
| tb_array_controller | exact address, rank, last and drain sequences, and the cycle-count formula, for 36 random jobs in both modes |
| tb_vdbb_accelerator | the whole design at its default size, end to end (described below) |

tb_vdbb_accelerator acts as the MCU. For each job it loads both buffers
through the host ports, swaps the banks and compares every drained result
with a reference convolution or GEMM. The jobs are:

- GEMMs for every NNZ from 1 to 8, with 1–3 x 1–2 tiles;
- 3x3 convolutions through the IM2COL units, with 8 and 16 channels and
  up to 3 x 2 tiles.

It requires each of these at least once: every NNZ, IM2COL and bypass,
clock gating, bank swaps, padding slots, multi-tile jobs, and
image-border padding. It also checks the cycle count of every job.

`tb_vdbb_workloads` uses the same harness on layer shapes from the
networks the design targets, each at the NNZ its network was pruned to:

- LeNet-5 conv2: a 5x5 kernel, with the host doing im2col, in bypass.
- A CIFAR ConvNet 3x3 layer with 32 input channels.
- ResNet-50 3x3 and 1x1 layers.
- A VGG-16 3x3 layer with 128 channels.
- MobileNetV1 pointwise and depthwise layers. The depthwise layer runs as
  an NNZ = 1 job.
- One complete job of the ResNet-50 stage-5 3x3 layer, 7x7x512 → 512.
  The job covers all 49 outputs and the full K of 4608, for 64 of the 512
  output channels; the whole layer takes eight such jobs.

Spatial sizes are otherwise cut to a few tiles.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_vdbb_accelerator \
    rtl/vdbb_pkg.sv $(ls rtl/*.sv | grep -v vdbb_pkg) tb/tb_vdbb_accelerator.sv
./obj_dir/Vtb_vdbb_accelerator
```

Each testbench ends with a `TB_RESULT checks=… failures=…` line. The
full-size end-to-end test builds in under a minute and simulates in well
under a second.

## 11. Changing the design

The shared constants are in `vdbb_pkg`: BZ, A, C, M, N, the buffer sizes
and the counter widths. Every module takes its sizes as parameters that
default to those constants:

- The array (`sta_array`, `tpe`, `s8dp1`) works for any A, C, M and N.
- The top level additionally needs A = 4 and an even M, for the IM2COL
  wiring.
- The SRAM depths follow from the byte capacities and word widths.
- The address and tile counters in `gemm_cfg_t` are 16 and 8 bits wide.
