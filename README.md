# CRISP-STC: a sparse tensor core for hybrid block + N:M sparse weights

CRISP prunes a neural network for the few classes one user actually sees. It
combines two kinds of structured sparsity in every weight matrix:

* **coarse blocks**: the matrix is cut into B x B blocks. Whole blocks are
  removed, and *every block-row keeps the same number of blocks*, so the work
  per row of blocks is equal.
* **fine N:M**: inside a surviving block, only N of every M = 4 consecutive
  weights are kept (1:4, 2:4 or 3:4).

A weight matrix pruned this way is described by two small metadata streams.
One lists the column index of each surviving block, block-row by block-row
(Blocked-Ellpack). The other gives a 2-bit offset for each kept weight inside
its group of four. This RTL is an accelerator that uses both: block indices
decide *which activations are fetched at all*, and the 2-bit offsets decide,
through multiplexers, *which fetched activation each kept weight multiplies*.
Because of that, every multiplier does useful work on every cycle for any of
the three N:M ratios.

The organisation follows the accelerator the CRISP work evaluates. It has
four tensor cores, each with 64 multiply-accumulate units and a 1 KB register
file, a 256 KB shared memory, and N:M selection by multiplexers. The paper
gives only that organisation and the dataflow. Everything else here is this
design's own choice and is marked as such below: operand widths, memory
layout, loop order, timing and the host interface.

## What one job computes

A job computes `out[s][n] = sum_k W[s][k] * A[k][n]`. Here `W` is an S x K
hybrid-sparse weight matrix: output channels by reduction length, the im2col
view of a convolution. `A` is a dense K x Ncol activation matrix. Operands are
signed 8-bit and results are 32-bit, wrapping on overflow. The host writes
everything into the shared memory, fills in a `job_t` descriptor and pulses
`start`:

| field       | meaning                                                  |
|-------------|----------------------------------------------------------|
| `nm_n`      | N of N:4 (1, 2 or 3), chosen per job                     |
| `n_blkrows` | S / B, number of weight block-rows                       |
| `n_colgrps` | Ncol / 4, number of activation-column groups (one column per core) |
| `kb_nz`     | surviving blocks per block-row (the same for all rows)   |
| `k_words`   | K / 64, length of one activation column in memory words  |
| `w_base`, `m_base`, `b_base`, `a_base` | word addresses of weights, 2-bit offsets, block indices, activations |

Results stream out on `out_valid`, one weight row per cycle at most:
`out_data[c]` is `out[out_row][out_col + c]`. There is no back-pressure.
`done` pulses once for one cycle after the last result.

Limits of one job: `kb_nz * B <= 1024`, because the surviving blocks of a
block-row must fit one register file. With B = 64 that is 16 blocks, i.e. a
compressed reduction length of 1024. Everything the job reads must also fit
the 256 KB shared memory. Bigger layers are split by the host: into column
groups and block-rows, and across K into several jobs whose outputs the host
adds. The accelerator does not add across jobs.

## Data layout in the shared memory

The shared memory is 4096 words of 64 bytes, with one host write port and two
read ports (A and B) of one-cycle latency.

* **Block indices** (`b_base`): 16-bit entries, 32 per word. Entry
  `bc = rb*kb_nz + j` is the block column of the j-th surviving block of
  block-row rb. It sits at word `b_base + bc/32`, bits `[16*(bc%32) +: 16]`.
* **Activations** (`a_base`): column-major. Column n starts at word
  `a_base + n*k_words`. Element k of the column is byte `k%64` of word
  `k/64`.
* **Compressed weights** (`w_base`): one *window* per word (next section).
  Weight row s (s = rb*B + r) owns windows `s*W .. s*W+W-1`. Byte k of a
  window word is the weight for MAC lane k.
* **2-bit offsets** (`m_base`): four windows per word. Window number `wc` uses
  word `m_base + wc/4`. The offset of lane k is at bits `[128*(wc%4) + 2k +: 2]`.

## How a row of compressed weights meets its activations

This is the part of the design that is hardest to follow.

**Gather.** Before the rows of block-row rb are computed, the controller
rebuilds a short dense activation vector for each core. This is the
*input tile*. For each surviving block j it reads the block index (port B),
then reads the 64 activations of that block from each core's column
(port A). It writes them to that core's register file at byte `64*j`. After
`kb_nz` blocks, register file c holds the activations of column
`4*cg + c` at exactly the K positions block-row rb still has weights for.
This costs 6 cycles per block.

**Groups and windows.** The input tile is `kb_nz*B/4` groups of 4
activations. A row's compressed weights hold N values per group. A window is
what 64 lanes can take in one cycle, `G = 64/N` groups:

| N:4 | groups per window G | lanes used | dense activations covered per cycle |
|-----|---------------------|-----------|-------------------------------------|
| 1:4 | 64                  | 64        | 256                                 |
| 2:4 | 32                  | 64        | 128                                 |
| 3:4 | 21                  | 63        | 84                                  |

A row therefore takes `W = ceil((kb_nz*B/4) / G)` cycles. The last window of
a row may be partly filled. Its `grp_cnt` tells the cores how many groups are
real, and lanes beyond that are switched off.

**Selection.** Lane k of a window serves group `k/N` of that window and kept
value `k%N` of the group. Its 2-bit offset picks one of the group's 4
activations with a 4:1 multiplexer. The paper's figure draws this for 2:4 as
"4:2 MUX" units, each taking 4 activations and giving 2 to the multipliers.
To serve all three ratios with one set of lanes, lane k's multiplexer here
can reach group k, k/2 or k/3 of the window; `nm_n` picks which. For 3:4,
lane 63 has no group and stays idle.

**Multiply and accumulate.** All four cores get the same weight window in
the same cycle (SIMD). Each multiplies it against its own register file,
i.e. its own activation column. The 64 products are summed in a registered
adder tree, and the per-window sums of a row are added in the accumulator.
After the row's last window each core emits one result.

## Timing

* Gather: 6 cycles per surviving block per (column group, block-row).
* Compute: one window per cycle with no stalls, so `B * W` cycles per
  (column group, block-row).
* A job takes `n_colgrps * n_blkrows * (6*kb_nz + B*W) + 5` cycles from the
  cycle after `start` to `done` inclusive. The testbenches check this number.
* Latency from a row's last window read to its result: 4 cycles. That is 1
  for the shared-memory read, then the product register, the adder-tree
  register and the accumulator register.

Example: a 2:4 job with 16 surviving 64 x 64 blocks per block-row (a full
register file) has 256 groups, 32 groups per window, so 8 cycles per weight
row. That covers 1024 compressed reduction positions, which stand for 4096
positions of the dense matrix if three quarters of the blocks were pruned.

## Modules

| file | what it is |
|------|------------|
| `rtl/crisp_pkg.sv` | shared widths, sizes, `nm_mode_t`, `job_t` |
| `rtl/smem.sv` | 256 KB shared memory, 1 write / 2 read ports |
| `rtl/register_file.sv` | 1 KB per-core input-tile store, segment write, windowed read |
| `rtl/activation_select.sv` | N:M selection multiplexers, runtime N |
| `rtl/mac_array.sv` | 64 multipliers and a pipelined adder tree |
| `rtl/accumulator.sv` | per-row accumulation, emits on the row's last window |
| `rtl/tensor_core.sv` | register file + selection + MACs + accumulator |
| `rtl/crisp_controller.sv` | gather and weight-stream sequencer |
| `rtl/crisp_stc.sv` | top: memory, controller, four tensor cores |

Parameters with paper values: 4 cores, 64 lanes, 1 KB register file, 256 KB
shared memory, B = 64. The paper evaluates B = 16, 32 and 64 and finds 64
best. `SEG`/`BLOCK` can be set to 16 or 32. It must divide the 64-byte memory
word.

## Where this departs from, or adds to, the paper

* **Operand widths** (8-bit weights and activations, 32-bit accumulation)
  are assumed. The paper gives none.
* **N is chosen per job.** The paper says the fabric supports 1:4 and 3:4
  besides 2:4, and also speaks of adapting the number of multiplexers and
  multipliers to the pattern. Here one fixed set of 64 lanes serves all
  three.
* **What the register file holds**: the paper gives only its size. Here it
  holds the gathered input tile. Weights are streamed straight from shared
  memory.
* **Block indices are a fixed 16 bits.** The paper's storage estimate
  charges each block index only floor(log2(K'/B)) bits. Fixed 16-bit
  entries keep the address arithmetic simple and allow up to 65536 block
  columns.
* **The shared memory's width and ports** are assumed. The paper only says
  its bandwidth is a fraction of a GPU's.
* **Gather is not overlapped with compute.** Each block-row's gather runs
  before its rows. For B = 64 this adds 6 cycles per block against
  64 x W cycles of compute.
* **No energy or area model.** The paper's speed-up and energy numbers come
  from a cycle-level simulator and CACTI, not from RTL. The cycle formula
  above is this design's own.
* **The host side is not described.** That covers im2col, tiling of large
  layers, splitting K across jobs and adding their outputs, and the pruning
  and compression flow that produces the weights. Here the host is whatever
  drives the memory write port and reads the result stream.

How far the sizes reach: for ResNet-50 at the overall sparsities the paper
reports (80.96 % for 3:4, 87.57 % for 2:4, 92.08 % for 1:4), the largest
3x3 x 512 x 512 layer keeps about 18 to 23 blocks of 64 per block-row. That
is more than one register file holds, so such layers need two jobs per
block-row. A 3x3 x 256 x 256 layer keeps about 9 to 11 and runs in one job
per tile of output positions.

## Verification

Each module has a self-checking testbench in `tb/`. It compares the module
against values computed independently in the testbench, checks latencies and
cycle counts, and prints `TB_RESULT checks=N failures=M`.

* `tb_crisp_stc` runs the whole accelerator at its default sizes. It builds
  random hybrid-sparse matrices, packs them into the memory layout above,
  runs jobs in 1:4, 2:4 and 3:4 (switching between them), and compares every
  result with a dense matrix product. The jobs include a full register file,
  several block-rows and column groups, partly filled windows and multi-window
  rows. It also checks every job's cycle count.
* `tb_resnet50_slice` runs a tile of a ResNet-50 3x3 convolution with 256
  input and 256 output channels. That is K = 2304 and 256 weight rows, over
  eight output positions, at default sizes. It runs once per ratio. The
  surviving blocks per block-row are derived from the overall sparsities
  reported for ResNet-50: 11 of 36 at 1:4, 9 at 2:4 and 9 at 3:4. Measured
  job lengths are 2069, 2997 and 4021 cycles. The same tile on the same 256
  MACs without any sparsity needs 256 x 8 x 2304 / 256 = 18432 MAC cycles,
  i.e. 8.9x, 6.2x and 4.6x more. Gather overhead is included in the sparse
  numbers.
* `tb_crisp_controller` checks every register-file write and every weight
  window the controller issues against a random memory image.
* `tb_tensor_core`, `tb_mac_array`, `tb_accumulator`, `tb_activation_select`,
  `tb_register_file` and `tb_smem` test the pieces alone.

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl rtl/crisp_pkg.sv rtl/*.sv \
    tb/tb_crisp_stc.sv --top-module tb_crisp_stc
./obj_dir/Vtb_crisp_stc
```

Swap in another `tb/tb_<module>.sv` and top-module name to run the others.
Every testbench ends in under a second of simulated work.
