# FuSeConv systolic array: an output-stationary array with per-row weight broadcast

Depthwise-separable convolution (MobileNet, MnasNet) cuts the operation count of a
convolution layer. On a systolic array it still runs slowly, because a depthwise K x K filter
touches only one channel. Mapped through im2col, each channel becomes a matrix product with a
single output column, so most of the array idles. FuSeConv ("fully separable convolution")
replaces each K x K depthwise filter with 1D filters: 1 x K along the width and K x 1 along
the height. In the *half* variant each filter type covers half of the channels. In the *full*
variant both types cover every channel. The 1 x 1 pointwise convolution stays as it is.

A 1D convolution is a systolic algorithm. It fits a row of a 2D array if every PE in that row
sees the same filter tap in the same cycle. The hardware change is therefore small. Each
array row gets a **weight-broadcast link**. Each PE gets a multiplexer (*DataEn*) that takes
its vertical operand either from the normal top-to-bottom systolic link or from its row's
broadcast link. With DataEn low the array is an ordinary output-stationary GEMM engine, which
runs the pointwise convolutions and fully connected layers. With DataEn high, every row
computes its own independent 1D convolution.

This repository is synthesizable SystemVerilog for that array, its scratchpad buffers and a
fold sequencer. The defaults are a 64 x 64 array (the size used for all performance
figures of the original study), 16-bit operands and 32-bit accumulators.

## Block structure

```
                    top scratchpad (1 bank per column)  -- GEMM operand B
                        |      |      |      |
  left scratchpad   --> PE --> PE --> PE --> PE          each row r:
  (1 bank per row)      |      |      |      |             - horizontal systolic link
  broadcast buffer  ==> ======================= (row 0)    - broadcast link (==>) to every
  (1 bank per row)  --> PE --> PE --> PE --> PE              PE of the row, same cycle
                        |      |      |      |
                       ...    ...    ...    ...
                        |      |      |      |
                    bottom scratchpad (1 bank per column) -- results (32 bit)
```

| file | module | role |
|---|---|---|
| `rtl/fuse_pkg.sv` | package | default sizes, `mode_e`, `buf_sel_e`, the fold command `cmd_t` |
| `rtl/fuse_pe.sv` | `fuse_pe` | PE: DataEn mux, two operand registers, multiply, accumulate, drain |
| `rtl/fuse_systolic_array.sv` | `fuse_systolic_array` | S x S grid with systolic links, row broadcast links and the drain chain |
| `rtl/fuse_scratchpad.sv` | `fuse_scratchpad` | banked buffer, one synchronous read and one write port per bank |
| `rtl/fuse_controller.sv` | `fuse_controller` | sequences one fold: clear, stream, drain |
| `rtl/fuse_accel.sv` | `fuse_accel` | top level: array, four scratchpads, controller, host ports |

### Processing element

Each PE has a horizontal operand register `h` (loaded from the left and passed right) and a
vertical operand register `v` (loaded from the DataEn mux and passed down). Both feed a
multiplier. The product is added into the stationary accumulator when `mac_en` is high.
`clear` zeroes all three registers. When `drain` is high the accumulator loads the
accumulator of the PE above instead. A column of results therefore moves down one row per
cycle into the bottom scratchpad. An operand seen at a PE input reaches the multiplier, and the
next PE, one cycle later.

## The two kinds of fold

All work is done in *folds*. A fold is one pass of the array that leaves one result in every
PE. A fold is started by a one-cycle `start` pulse with a `cmd_t` and runs three phases:

1. **CLEAR**, 1 cycle: all operand registers and accumulators are zeroed.
2. **STREAM**: the controller reads one word per cycle from every bank that feeds an edge.
   Reads take one cycle. A word that falls outside its valid window enters the array as zero.
3. **DRAIN**, S cycles: the accumulators shift down. In drain cycle `d` the bottom edge
   shows array row `S-1-d`, which is written to address `out_base + S-1-d` of every bottom
   bank. Array row `r` therefore lands at `out_base + r`, column `c` in bank `c`.

`done` pulses one cycle after the last drain write. Counted from the clock edge that takes
`start` to the one that raises `done`, the latency is:

| fold | STREAM cycles | start to done |
|---|---|---|
| GEMM (`len` = inner dimension) | `len + 2S` | `1 + len + 2S + S` |
| FuSe (`len` = taps K, `ncols` outputs per row) | `ncols + K + 1` | `1 + ncols + K + 1 + S` |

Folds do not overlap. At S = 64 a full-width 3-tap FuSe fold takes 133 cycles and gives
64 x 64 outputs. Most of that time is input fill and drain, not the K multiply cycles.

### GEMM fold (DataEn = 0)

This is the classic output-stationary flow. Row `r` reads `A[r][k]` from left bank `r` at
`in_base + k` in stream cycle `k + r`. Column `c` reads `B[k][c]` from top bank `c` at
`w_base + k` in stream cycle `k + c`. These one-cycle skews make `A[r][k]` and `B[k][c]` meet in
PE(r,c) in the same cycle, so PE(r,c) ends with `sum_k A[r][k] * B[k][c]`. A pointwise
convolution is a GEMM fold: rows are pixels, columns are output channels and the inner
dimension is input channels.

### FuSe fold (DataEn = 1): how a row computes a 1D convolution

This is the least obvious part of the design. Each row convolves its own input slice `I`
with its own K-tap filter `w`:

    O[n] = sum_{k=0}^{K-1} I[n+k] * w[k],   n = col_off .. col_off+ncols-1

The input enters at the left edge and moves one PE to the right per cycle. Column `j`
therefore sees the stream delayed by `j` cycles. To give column `j` the output
`O[col_off + j]`:

* the row streams `I[P], I[P-1], ..., I[col_off]`, highest index first, with
  `P = col_off + ncols + K - 2`;
* from stream step `t0 = ncols - 1` on, for K steps, the row's broadcast link carries
  `w[K-1], w[K-2], ..., w[0]`. All PEs of the row see the same tap in the same cycle.

At tap step `k` (counting down from K-1), column `j` holds `I[col_off + j + k]` in its `h`
register and multiplies it by `w[k]`. This is the moving window of the convolution. Column
`ncols-1` is the last to fill, at step `t0`. Columns `j >= ncols` see only part of the window,
so they are not written back. Example with S = 4, K = 2, `col_off = 0`, `ncols = 4`: the stream is
I4, I3, I2, I1, I0. The taps w1, w0 appear at steps 3 and 4:

| step | broadcast | PE0 `h` | PE1 `h` | PE2 `h` | PE3 `h` |
|---|---|---|---|---|---|
| 3 | w1 | I1 | I2 | I3 | I4 |
| 4 | w0 | I0 | I1 | I2 | I3 |

PE j accumulates `I[j+1]*w1 + I[j]*w0 = O[j]`.

Rows are fully independent. Every row reads the **same** bank addresses (`in_base`, `w_base`),
but from its own banks. So in one fold, 64 rows can run 64 image rows of one channel, or
several channels stacked in different rows when a feature map is smaller than the array.

## Mapping a FuSeConv layer onto folds

The host (not part of this RTL) cuts a layer into folds:

* **Row groups**: array row `r` takes image row `g + r`. A 112-row map needs groups of
  64 and 48 rows.
* **Channel folds**: each row bank holds its image row for several channels one after
  another (for example at `ch * 114` for padded 112-wide rows). One fold per channel steps
  `in_base` and `w_base`. The broadcast bank of every row holds the filter of each channel.
* **Column folds**: a row with more than S outputs is split with `col_off` and `ncols`. The
  last fold may use fewer columns.
* **Column (K x 1) filters**: the same hardware is used, with image *columns* written into
  the row banks.
* **Padding** is written into the banks by the host. **Stride 2** layers are not supported
  directly. The host computes stride 1 and keeps every other output.
* **Pointwise convolution and FC layers** run as GEMM folds. An inner dimension of up to
  2048 fits one fold at the default bank depth.

`tb/tb_mbv1_fuse_block.sv` runs a whole FuSe-Half block of MobileNet-V1 this way. The block
has a 112 x 112 x 32 input, sixteen 1 x 3 and sixteen 3 x 1 filters, and a pointwise
convolution to 64 channels. That is 128 FuSe folds and 196 GEMM folds, all at the default
parameters.

## Interface of `fuse_accel`

| port | meaning |
|---|---|
| `wr_en, wr_buf, wr_bank, wr_addr, wr_data` | write one 16-bit word per cycle into the left, top or broadcast buffer |
| `rd_bank, rd_addr -> rd_data` | read a 32-bit result from the bottom buffer, data one cycle after the address |
| `start, cmd` | start a fold (`start` only while `busy` is low; an assertion checks this) |
| `busy, done` | fold running; one-cycle pulse at the end |

`cmd_t` fields: `mode` (`MODE_GEMM`/`MODE_FUSE`), `len` (GEMM inner dimension or FuSe tap
count), `ncols` and `col_off` (FuSe only), `in_base` (left buffer), `w_base` (top buffer in
GEMM, broadcast buffer in FuSe) and `out_base` (bottom buffer).

Parameters: `S` (array size, 64), `DATA_W` (16), `ACC_W` (32), `DEPTH` (words per bank,
2048). Reset is asynchronous and active low. The scratchpads are not reset.

## What follows the original design and what is added here

Taken from the FuSeConv design:

* The output-stationary array.
* The PE with its DataEn multiplexer, two operand registers, multiplier, adder and
  accumulator.
* One broadcast link per row.
* Scratchpad buffers on the left, top and bottom edges.
* Inputs flowing along the rows and filters broadcast per row, folded over channel slices.
* The 64 x 64 size.

Choices made in this implementation, where the original gives no detail:

* **Arithmetic**: the networks were trained and run in FP16. This datapath uses 16-bit
  signed integers with a 32-bit wrapping accumulator, with no rounding, saturation or
  requantization.
* **Drain**: the PE figure shows an unlabeled adder input from above. It is used here as a
  shift chain that moves results into the bottom buffer. The original mapping sketch draws
  each row's output slices at the right end of the row. Here every result leaves through the
  bottom edge, as in the array figure.
* **Buffers**: there is one bank per row or column and 2048 words per bank. Reads are
  synchronous. A fourth per-row buffer feeds the broadcast links.
* **Timing**: the FuSe streaming order and the tap timing are this design's own.
* **Host interface and folds**: the host interface and the fold command are new. Folds run
  one after another, with no double buffering of accumulators. Folds cannot accumulate into
  earlier results, so an inner dimension above `DEPTH` must be summed by the host.
* **Not covered**: activation functions, batch-norm, squeeze-and-excite gating, pooling and
  stride are outside the array, as they are in the original latency study.

## Fit of the evaluated workloads

Layer sizes below come from the published network definitions, not from the FuSeConv study.

| workload | largest demand | default build | runs |
|---|---|---|---|
| MobileNet-V1 (baseline, Full, Half, 50 % variants) | 112-wide rows (114 padded, x16 channels = 1824 words per bank); GEMM inner dim 1024 | 2048-word banks, 64 x 64 | yes |
| MobileNet-V2 | 112-wide rows; inner dim 1280 (last 1x1 and FC) | same | yes |
| MnasNet-B1 | 112-wide rows, 5-tap filters; inner dim 1280 | same | yes |
| MobileNet-V3 Small / Large | 112-wide rows, 5-tap filters; inner dim 1024 / 1280 | same | yes |
| Baseline depthwise layers | im2col GEMM folds with one useful column | same | yes, at low utilization (the motivating problem) |
| 32x32, 128x128, 256x256 arrays (scaling study) | S = 32 / 128 / 256 | S = 64 | set parameter `S` |

## Verification

Each testbench checks its outputs against a reference computed independently in the
testbench. Each ends with a `TB_RESULT checks=N failures=M` line.

| testbench | what it checks |
|---|---|
| `tb_fuse_pe` | 4000 random cycles against a cycle model of the PE (mux, MAC, drain, clear) |
| `tb_fuse_systolic_array` | 4 x 4 grid driven directly: GEMM with skew, FuSe 1D convolutions with 1, 3 and 5 taps, drain order |
| `tb_fuse_scratchpad` | random multi-bank traffic, read latency, read-during-write |
| `tb_fuse_controller` | 40 random folds: phase lengths, every read address and valid flag, drain addresses and masks, done |
| `tb_fuse_accel` | 8 x 8 build end to end: GEMM, FuSe over two channels and two column folds (one partial), mode switches both ways, fold latencies, mechanism counts |
| `tb_fuse_accel_full` | default 64 x 64 build: a full-width FuSe fold and a 64x32x64 GEMM fold, all 8192 results and both latencies |
| `tb_mbv1_fuse_block` | default build: the whole MobileNet-V1 FuSe-Half block described above, every output |

To simulate with Verilator 5, for example the end-to-end test:

    verilator --binary --timing --assert rtl/fuse_pkg.sv rtl/fuse_pe.sv \
      rtl/fuse_systolic_array.sv rtl/fuse_scratchpad.sv rtl/fuse_controller.sv \
      rtl/fuse_accel.sv tb/tb_fuse_accel.sv --top-module tb_fuse_accel -Mdir obj
    ./obj/Vtb_fuse_accel

The 64 x 64 builds take a few minutes to compile and seconds to run. Change the array size
with `-GS=...` on a build of `fuse_accel`, or with the parameter list in a testbench.
