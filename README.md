# BP-im2col on a 16x16 systolic array: RTL

Training a convolutional layer takes two products besides the forward pass:

* **loss calculation**: the loss of the layer input is a *transposed* convolution of the output loss `dO`. `dO` must first be zero-inserted (S-1 zeros between pixels) and zero-padded (Kh-1-Ph rows/columns each side), and is then convolved with the 180°-rotated, channel-transposed kernel.
* **gradient calculation**: the kernel gradient is a *dilated* convolution of the padded input `I` with the zero-inserted output loss.

Lowered to a matrix product in the usual im2col way, these zero spaces make up roughly 75-94% of one operand for stride-2 layers. If you materialise them, you pay for storing, moving and reading zeros. **BP-im2col** never stores them. The address generators work in the coordinates of the *virtual* zero-filled lowered matrix. They decide per element whether it is a zero space ("NZ detection") and map each non-zero to its address in the compact tensor actually held in the on-chip buffer. Zeros are put back only at the entrance of the systolic array.

This repository is synthesizable SystemVerilog for such an accelerator:

* a 16x16 input-stationary FP32 systolic array;
* a stationary-operand address generator for matrix B, with transposed-mode NZ detection;
* a dynamic-operand address generator for matrix A, with dilated-mode NZ detection and address compression;
* double-buffered operand buffers;
* a crossbar that restores compressed data;
* skew FIFOs;
* a controller and an output accumulation buffer.

## 1. The two operating modes

The array always computes `Y = A x B`. Here `A` is M x K and is streamed ("dynamic"), and `B` is K x NC and is held in the PEs in 16x16 blocks ("stationary"). Symbols: batch `B`, channels `C` (input) and `N` (output), input `Hi x Wi`, kernel `Kh x Kw`, stride `S`, padding `Ph, Pw`, and output `Ho x Wo` with `Ho = (Hi+2Ph-Kh)/S+1`. The zero-inserted output loss is `Ho'' = (Ho-1)S+1` by `Wo''`.

| mode (`cfg.mode`) | A (buffer A holds) | B (buffer B holds) | M | K | NC | result Y[m][col] |
|---|---|---|---|---|---|---|
| `MODE_LOSS` (transposed) | kernel, stored as the C x (N·Kh·Kw) matrix `A[c][n,kh,kw] = W[n][c][Kh-1-kh][Kw-1-kw]` | output loss, `B x N x Ho x Wo` | C | N·Kh·Kw | B·Hi·Wi | loss of the input at `col = (b·Hi + h)·Wi + w` |
| `MODE_GRAD` (dilated) | output loss, `B x N x Ho x Wo` | input feature map, `B x C x Hi x Wi` | N | B·Ho''·Wo'' | C·Kh·Kw | kernel gradient at `col = (c·Kh + kh)·Kw + kw` |

All tensors are dense, row-major, FP32, and start at word 0 of the buffer half. The host writes them once; no reorganised copy is ever made. The one exception is the loss-mode kernel, which must be stored already rotated and transposed, as in the table. This is a small, one-time reorder of the weights, and this design leaves it to the host.

Which operand carries the zeros:

* loss mode: the stationary operand B (zero insertion plus padding of `dO`);
* gradient mode: the dynamic operand A (zero insertion of `dO`), while B only carries the ordinary padding of the input.

## 2. NZ detection and address mapping

Each lane of an address generator is a 4-stage pipeline. Each stage performs a few divisions or remainders, following the algorithm below line by line.

**Transposed mode, matrix B** (`transposed_map.sv`). The virtual address is `row·(B·Hi·Wi) + col`, where `row = (n, kh, kw)` and `col = (b, h0, w0)`.

* Its pixel in the zero-filled loss map is `h = h0 + kh`, `w = w0 + kw`.
* **Area 0**, the top/left padding: `h < Kh-1-Ph` or `w < Kw-1-Pw`.
* **Area 1**, the inserted zeros: `(h-(Kh-1-Ph)) % S != 0` or `(w-(Kw-1-Pw)) % S != 0`.
* This design also treats `h' = (h-(Kh-1-Ph))/S >= Ho` (and the same for w) as zero. That covers the bottom/right padding, and the input rows that a stride leaves uncovered.
* A non-zero maps to `b·N·Ho·Wo + n·Ho·Wo + h'·Wo + w'`.

**Dilated mode, matrix A** (`dilated_map.sv`). The virtual address is `n·(B·Ho''·Wo'') + (b, h, w)`.

* The element is zero when `h % S != 0` or `w % S != 0`.
* Otherwise it maps to `b·N·Ho·Wo + n·Ho·Wo + (h/S)·Wo + w/S`.

**Gradient mode, matrix B** (`im2col_map.sv`) is ordinary implicit im2col over the padded input. Row `(b, h, w)` and column `(c, kh, kw)` read `I[b][c][h+kh-Ph][w+kw-Pw]`, or zero outside the image.

## 3. Data path and timing

```
           start/cfg                       compute_bank (which buffer half is computed on)
               |
        compute_ctrl ---- st requests ---> stat_agu (16 lanes, 5 cyc) --nz,addr--> buffer_b (1 cyc, zero fill)
           |   ^                                                                       |
           |   | col_count                                              one PE row per cycle (load)
           |   |                                                                       v
           +---+-- dy requests ---> dyn_agu (16 lanes + compression, 6 cyc)     systolic_array 16x16
               |                        | base0/base1            | nz/run/rank      ^ west edge   | south edge
               |                        v                        v (reg)          |              v
               |                    buffer_a (1 cyc) --win0/1--> crossbar --> skew_fifos    out_buffer
               +-------------------------------------------------------- tile_start ----------->  (accumulate)
```

**Stationary load.** For a 16x16 block, the controller issues rows `k = 16·kt .. 16·kt+15` with first column `16·nt`. `stat_agu` generates the 16 lane addresses `k·NC + 16·nt + j`, marks zero lanes, and maps the others. `buffer_b` reads only the non-zero lanes and returns zero for the rest. Six cycles after the request, the row is written into PE row `k mod 16`.

**Dynamic stream.** The controller then issues rows `m = 0..M-1` of A, one per cycle, for columns `16·kt .. 16·kt+15`. The 16 virtual addresses of a row block are consecutive. In gradient mode each lane is mapped and checked, and the **compression** stage then reduces the 16 mapped addresses to:

* the address of the first non-zero lane (`base0`);
* per lane, a mask bit and a *rank* among the non-zeros.

The stored non-zeros follow each other in memory, so buffer A returns 16 consecutive words from `base0`, and the crossbar sends word `rank[j]` to lane `j`, or zero where the mask bit is clear.

The stored layout `B x N x Ho x Wo` has one exception. When a row block crosses from one batch image into the next (and N > 1), the non-zeros jump. The compression stage then opens a second run (`base1`, `out_split`), and buffer A returns a second window. One row block can span at most two images as long as `Ho''·Wo'' >= 16`; an assertion checks this.

**Array.** `skew_fifos` delays lane k by k cycles. PE(k, n) holds `B[k][n]`. A moves east and partial sums move south, one PE per cycle. Row m's result leaves column n at `t + n + 16`, where t is the cycle the row entered lane 0.

**Output.** `out_buffer` has one bank per column. It counts the rows arriving on each column and writes them for the first K block, or adds them in FP32 for later K blocks. Column `col` of Y lives in bank `col % 16` at address `(col / 16)·M + m`.

**Schedule.** The controller's loops are: result column blocks outer (`nt`), K blocks inner (`kt`). Each block takes 16 load cycles, a 2-cycle gap, M stream cycles, and then waits until column 15 has returned all M rows (about 39 cycles of pipeline). Loading, streaming and draining do not overlap. A run therefore takes about `3 + ceil(K/16)·ceil(NC/16)·(M + 57)` cycles.

The address-mapping prologue is 5 cycles for the stationary generator and 6 cycles for the dynamic generator, in both modes. Published figures for this architecture, from pipelined fixed-point dividers, are:

* loss calculation: 68 cycles stationary and 0 dynamic;
* gradient calculation: 51 cycles stationary and 68 dynamic.

Here the divisions are combinational operators inside 4-stage lanes. In loss mode the dynamic generator does no mapping, but it still delays its output by the same 6 cycles. That keeps the two modes' schedules identical.

## 4. Arithmetic

`fp32_pkg.sv` provides IEEE-754 single-precision `fp32_mul` and `fp32_add`:

* round to nearest, ties to even;
* denormals are read and written as zero;
* overflow goes to infinity;
* no NaN handling.

A PE computes `psum + round(a·b)` with two roundings (not fused).

## 5. Using it

**Host interface of `bp_im2col_top`:**

* **Configuration:** `cfg_in` (`layer_cfg_t`, see `bp_pkg.sv`) and a one-cycle `start`. `busy` is high during a run; `done` rises at the end and stays high until the next start.
* **Double buffering:** `compute_bank` selects the buffer halves read by the run. Writes through `a_wr_*` / `b_wr_*` into the *other* half may proceed during a run. An assertion flags writes into the half in use.
* **Results:** read combinationally through `out_rd_col` / `out_rd_addr` / `out_rd_data`.
* **Counters:** the `perf_*` counters give busy cycles, words actually read from buffers A and B (the buffer bandwidth the method saves), lanes skipped as zero, row blocks that needed two runs, and blocks processed.

**Constraints:** `1 <= S`, `Ph <= Kh-1`, `Pw <= Kw-1`, and in gradient mode `Ho''·Wo'' >= 16`. A whole layer must fit: the operand tensors in one half of each buffer (`A_DEPTH`, `B_DEPTH`, default 16384 words per half), and `M·ceil(NC/16)` words in each output bank (`OUT_DEPTH`, default 4096). There is no off-chip memory interface or DMA. The five stride-2 layers whose cycle counts are published for this architecture (e.g. 224x224x3 to 64 channels, 28x28x244 to 244) are all far larger than these buffers, so they cannot run here without an external tiling layer.

**Simulation** with plain Verilator, from the repository root:

```
verilator --binary --timing --assert -Irtl rtl/bp_pkg.sv rtl/fp32_pkg.sv \
    tb/tb_bp_im2col_top.sv --top-module tb_bp_im2col_top -y rtl -y tb
./obj_dir/Vtb_bp_im2col_top
```

Every testbench prints `TB_RESULT checks=N failures=F` and stops itself with a watchdog. The same command works for each `tb/tb_<block>.sv`.

## 6. Testbenches and what they establish

| testbench | checks |
|---|---|
| `tb_pe` | FP32 multiply-add against an exact double-precision reference rounded once to single precision, with cancellation cases; row-selected loading; east pass |
| `tb_systolic_array` | a full 16x16 block with 24 skewed rows and a bubble: every result and its exit cycle |
| `tb_skew_fifos` | the delay of every lane, for data and valid |
| `tb_buffer_a`, `tb_buffer_b` | windows and lane reads from both halves, zero fill, writes into the idle half |
| `tb_crossbar` | random masks, split into one or two runs |
| `tb_dyn_agu` | every row block of a gradient-mode and a loss-mode layer: masks, the addresses implied by run base and rank, two-run detection, latency |
| `tb_stat_agu` | every row of every block, both modes, against zero maps computed from the convolution definitions |
| `tb_compute_ctrl` | derived sizes, request order, block bookkeeping, exact cycle count |
| `tb_bp_im2col_top` | four full layer operations at default sizes (loss and gradient, P=1 and P=0 with uncovered rows). Results are bit-exact against direct convolution on integer-valued data. It also checks the buffer words read against a count of non-zeros, the two-run cases, and writes into the idle half during a run |
| `tb_table2_layers` | the five published stride-2 layer shapes, kept at their kernel/stride/padding but scaled down to fit the buffers (Hi/C/N: 15/3/16, 14/16/16, 14/32/64, 8/20/20, 7/64/128, batch 2). Covers both modes, partial blocks, and 1x1 kernels. It uses the same result, bandwidth and cycle checks as `tb_bp_im2col_top`, and each operation takes 3,000 to 16,500 cycles |

## 7. Where this design goes beyond, or departs from, the published description

* **Own additions:**
  * the second compression run for batch-image crossings;
  * the bottom/right zero test in transposed mode;
  * the output accumulation buffer;
  * the host interface and performance counters.
* **Own choices where the description is silent:**
  * buffer sizes and one-word-per-lane reads of buffer B;
  * one-cycle buffer latency;
  * the PE load mechanism;
  * the controller's loop order and its non-overlapped schedule;
  * FP rounding details.
* **Network between the address generators and the buffers:** only named in the published description, and replaced by direct wiring here.
* **Crossbar:** a full select per lane, not the pruned crossbar mentioned in the description.
* **Prologue latency:** shorter than published (see section 3), because the divider pipeline is not described.
