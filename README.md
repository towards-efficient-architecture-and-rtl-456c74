# A two-array accelerator for RGB-depth middle fusion with prunable fuseLinks

Middle fusion joins two CNNs, one for the camera image (RGB) and one for the
depth map, part-way through: features of one network are fed into the other at
intermediate layers. Each such connection is a *fuseLink*. A fuseLink holds a
small convolution (the *fuseFilter*) that maps the channel count of the layer
it reads from (the active layer) onto the channel count of the layer it feeds
(the passive layer); its result is added into the passive network. A small
hypernetwork looks at the input and gives every fuseLink an importance weight
`w_l`; links with `w_l` below a threshold `th` are pruned for that input, which
trades a little accuracy for latency. The threshold is set per driving scenario.

Two networks that exchange data at several layers fit badly on one large PE
array: they must take turns, and the fuseLinks add dependencies between them.
This design therefore splits the array into two halves. Each half is a complete
processing system with its own buffers and sequencer, and runs one modality.
The halves are coupled only through *fuseLink buffers*: a half that computes a
fuseFilter writes its partial sums directly into the other half's fuseLink
buffer, and the other half adds them into its own column sums as they start.
A shared system controller decides which links are pruned for the current frame
and holds a consuming half back until the link it needs has been produced.

The RTL here is a synthesizable SystemVerilog model of that organisation, with
32-bit floating-point arithmetic throughout.

## Block structure

```
                    +------------------------- a3f_top --------------------------+
 host / off-chip    |  fm_sys_ctrl: th, w_1..w_8, keep = (w_l >= th), ready[l]    |
 memory ports  ---->|                                                            |
                    |  fm_half A (RGB)                 fm_half B (depth)          |
                    |  +----------------------+        +----------------------+   |
                    |  | fm_ifmap_buf  --x-->  |        |  ...same as A...     |   |
                    |  | fm_weight_buf --w-->  |        |                      |   |
                    |  | fm_pe_array 8 x 16    |        |                      |   |
                    |  |   column mux <-- fm_fuselink_buf <--------------------+-- fo (B's fuseFilter results)
                    |  |   column mux <-- fm_psum_buf (earlier passes)         |   |
                    |  | -> psum -> fm_relu -> fm_pool --> own fm_ifmap_buf     |   |
                    |  |                              `--> fo: B's fuseLink buf |   |
                    |  | fm_half_ctrl (job list)                               |   |
                    |  +----------------------+        +----------------------+   |
                    +------------------------------------------------------------+
```

| File | Block |
|---|---|
| `rtl/fp32_pkg.sv` | single-precision multiply, add, compare |
| `rtl/a3f_pkg.sv` | default sizes, job descriptor `job_t`, controller states |
| `rtl/fm_pe.sv` | processing element: one fp32 MAC per cycle |
| `rtl/fm_pe_array.sv` | ROWS x COLS systolic array with per-column fuseLink multiplexer |
| `rtl/fm_ifmap_buf.sv` | input (feature-map) buffer, also receives layer outputs |
| `rtl/fm_weight_buf.sv` | weight buffer |
| `rtl/fm_psum_buf.sv` | partial sums between passes |
| `rtl/fm_fuselink_buf.sv` | partial sums received from the other half |
| `rtl/fm_relu.sv`, `rtl/fm_pool.sv` | activation and 2x2 max pooling |
| `rtl/fm_half_ctrl.sv` | job sequencer of one half |
| `rtl/fm_half.sv` | one processing half |
| `rtl/fm_sys_ctrl.sv` | threshold compare, link scoreboard, frame start/done |
| `rtl/a3f_top.sv` | the accelerator |

Default sizes: each half has an 8 x 16 array (8 rows, 16 columns), there are 8
fuseLinks (`w1..w8`). Buffer depths (input and weight buffers 1024 words of 8
values, psum and fuseLink buffers 256 vectors of 16 values, 16 jobs per half)
are this design's choice; the published description gives none.

## The array and its column multiplexer

Weights are stationary. Input values enter at the left of each row and move one
PE to the right per cycle; partial sums enter at the top of each column and move
down, each PE adding `x * w` (fp32 multiply, then fp32 add, each rounded to
nearest-even). The array skews its own inputs (row `r` delayed `r` cycles,
column top `c` delayed `c` cycles) and deskews its outputs, so from outside it
is a plain pipeline: a vector presented in cycle `t` returns as a 16-value
result in cycle `t + ROWS + COLS - 1` (23 at the defaults), one vector per cycle.

```
out[c] = top[c] + x[0]*W[0][c] + x[1]*W[1][c] + ... + x[ROWS-1]*W[ROWS-1][c]
top[c] = fuse_sel ? fuseLink_buffer[c] : (first pass ? 0 : psum_buffer[c])
```

The multiplexer in front of each column is where fusion happens: when the
current job consumes a kept fuseLink, the other modality's fuseFilter results
start the column sums, so the fused sum costs no extra cycles. When the link
is pruned the multiplexer takes the local path and the fuseLink buffer is
ignored. Weights are loaded by shifting: during `COLS` cycles each row takes
one weight from the left, so the word given first ends in the last column.

## Jobs: how a layer is mapped

Each half runs a list of *jobs* written by the host into its job table
(`job_t` in `a3f_pkg`). A job streams `n_pix` pixels through the array once per
*pass*; pass `k` covers input channels `8k .. 8k+7`, so a job with `n_pass`
passes has `8 * n_pass` input channels and 16 output channels. Convolutions
larger than 1x1 are run as matrix jobs over an im2col layout prepared by the
host; the hardware does not generate window addresses.

| field | meaning |
|---|---|
| `n_pix`, `n_pass` | pixels per pass; passes (0 is read as 1) |
| `in_base` | input word of pixel `p` in pass `k`: `in_base + k*n_pix + p` |
| `w_base` | weight word `j` of pass `k`: `w_base + k*16 + j` (column `15-j`, one weight per row) |
| `out_base` | where results go, see below |
| `fl_base` | fuseLink buffer vector read for pixel `p`: `fl_base + p` |
| `relu_en`, `pool_en` | apply ReLU; max-pool groups of 4 consecutive pixels |
| `role`, `link` | `ROLE_NONE`, `ROLE_PRODUCE` or `ROLE_CONSUME` of link `link` |

Results of every pass but the last go to the psum buffer and come back as the
column tops of the next pass, so sums accumulate over passes (a multi-pass job
may have at most 256 pixels). After the last pass the sums go through ReLU and
pooling. Pooling takes the channel-wise maximum of four consecutive pixels, so
the host must order a layer's pixels in 2x2 blocks and make `n_pix` a multiple
of 4. Output pixel `o` then goes:

* for `ROLE_PRODUCE`: to the other half's fuseLink buffer at `out_base + o`;
* otherwise: back into the own input buffer as two 8-value words,
  `out_base + o` (channels 0-7) and `out_base + n_out + o` (channels 8-15),
  where `n_out` is `n_pix/4` with pooling and `n_pix` without. That is exactly
  the layout a following job with `in_base = out_base` and `n_pass = 2` reads.

A fuseFilter job is normally run with ReLU and pooling off so that raw partial
sums cross over; turning pooling on lets a link join layers of different
resolution.

## Pruning and keeping the halves aligned

The host writes `th` and the eight link weights (fp32; in the published examples
`th` is 0.2 or 0.4) and pulses `start`. The system controller latches
`keep[l] = (w_l >= th)` for the whole frame, clears the `ready` flags and starts
both halves. Then, in each half's sequencer:

* a `ROLE_PRODUCE` job of a pruned link is skipped: its fuseFilter is never
  computed, which is where pruning saves time;
* a `ROLE_PRODUCE` job of a kept link runs and, when its last result is
  written, reports `link_done`, which sets `ready[link]`;
* a `ROLE_CONSUME` job of a kept link waits until `ready[link]` is set, then
  runs with the fuseLink multiplexer selected for its first pass;
* a `ROLE_CONSUME` job of a pruned link runs at once, without the fuseLink.

`done` rises when both halves have finished their lists. The system makes no
attempt to detect a job list whose waits form a cycle between the halves;
ordering producers before consumers is the host's task.

## Timing

Everything is synchronous to one clock with an active-low asynchronous reset
on control and pipeline registers; buffer contents are not reset. Buffers read
in one cycle. A job that runs costs, in cycles,

```
1 + n_pass * (COLS + n_pix + ROWS + COLS + 3)      (+ cycles waiting for a link)
```

— one cycle to fetch the descriptor, per pass 16 cycles of weight loading, one
cycle per pixel, and a drain so that the next pass's weights never overwrite
weights still in use. A skipped job costs one cycle, and a frame one more.
Weights are not double-buffered, so at small `n_pix` the loading and drain
dominate. The sequencers expose counters (`cnt_cycles`, `cnt_wait_cycles`,
`cnt_jobs_run`, `cnt_jobs_skipped`, `cnt_fused`) that the tests compare with
this formula.

## Host interface (`a3f_top`)

All host ports are arrays indexed by half (0 = A, 1 = B):
`hw_*` writes an input-buffer word, `wt_*` a weight word, `jt_*` a job-table
entry, `n_jobs` sets the list length, and `hr_*` reads an input-buffer word
(data one cycle later, while the half is idle). `th_we/th_in` and
`wl_we/wl_idx/wl_in` set the threshold and link weights; they take effect at
the next `start`. Off-chip memory and the hypernetwork are outside the design:
the host moves data through these ports and supplies `w_l`.

## Floating point

`fp32_pkg` implements IEEE-754 single-precision multiply and add with
round-to-nearest-even. Subnormal inputs read as zero and subnormal results are
flushed to zero; an infinite or NaN input gives infinity and overflow gives
infinity; NaN is never produced. Comparisons (pooling, threshold) order values
numerically, with -0 below +0. Within these limits results are bit-exact with
correctly rounded single-precision arithmetic, and the testbenches check
bit-exactness against a double-precision reference rounded to single.

## What follows the published design and what is this design's own

Taken from the published design: the split into two halves with their own buffers and
control, the 8 x 16 array per half, one fp32 MAC per PE, the block order
buffers -> PE array -> Psum -> ReLU -> Pool, the return of pool outputs to the
buffers, the crossing of results into the other half's fuseLink buffer, the
multiplexer at each column fed by that buffer, the threshold compare
`w_l >= th` in the system controller, eight links, and dynamic, per-input
pruning.

This design's own choices: the weight-stationary dataflow and single-cycle
MAC; how partial sums are accumulated across passes; the job format and
addressing; max pooling over four consecutive pixels; the ReLU and pooling
bypasses; the ready scoreboard used for alignment; buffer depths; the
floating-point corner cases; the host interface.

Not included: the off-chip memory and its controller (the buffers are filled
through ports), the hypernetwork (its weights are an input), any tiling of
layers larger than the buffers, and the 16 x 16 single-array baseline the
design is meant to be compared with. Clock frequency and FPGA resource use are
properties of an implementation, not of this RTL. The PE's multiply-accumulate is written as
plain single-cycle fp32 logic; the published FPGA implementation builds each
PE from five DSP blocks, which implies a deeper arithmetic pipeline than the
one modelled here.

## Simulating

Every block has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=N failures=M`. Shared testbench code: `fp_ref_pkg`
(reference arithmetic) and `a3f_model_pkg` (a job-level reference model).
With Verilator 5:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/fp32_pkg.sv rtl/a3f_pkg.sv tb/fp_ref_pkg.sv tb/a3f_model_pkg.sv \
    tb/tb_a3f_top.sv --top-module tb_a3f_top -o sim
./obj_dir/sim
```

Replace `tb_a3f_top` by any other testbench name. `tb_a3f_top` runs the whole
accelerator at its default sizes: each half runs a multi-pass layer with ReLU
and pooling, a fuseFilter job for one link and a layer that consumes the other
half's link, over two frames with `th` = 0.2 (both links kept; half A stalls
for half B's link) and `th` = 0.4 (one link pruned and skipped). It compares
every result word with the reference model and every half's cycle count with
the formula above, and counts that fusion, pruning, stalling, multi-pass
accumulation, ReLU clipping and pooling each happened. It takes about 20 s to
build and well under a second to run. The block testbenches also run at the
default sizes unless their header says otherwise.

`tb_a3f_fusion8` runs the full eight-link arrangement: each half runs a
five-layer branch, and after each of the first four layers both halves
exchange a fuseLink, giving links w1..w8 in both directions. The same input is
run at four thresholds; with the link weights used there, the frame takes
886 cycles with every link kept (th = 0), 886 at th = 0.2 (two links pruned,
but the longer half still waits), 789 at th = 0.4 (five pruned) and 506 with
every link pruned (th = 1), every result matching the reference model. This is
the latency-for-accuracy trade-off that the threshold controls.

To change the array or buffer sizes, override the parameters of `a3f_top`
(`ROWS`, `COLS`, `IBUF_DEPTH`, `WBUF_DEPTH`, `PSUM_DEPTH`, `FL_DEPTH`,
`NJOBS`, `NLINKS`) or the defaults in `a3f_pkg`. `COLS` should be a multiple
of `ROWS` for the write-back layout above, and `NLINKS` at most 8.
