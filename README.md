# BitVert: a bit-serial accelerator for bi-directional bit sparsity — SystemVerilog RTL

A bit-serial DNN accelerator takes a weight one bit column at a time. For a group
of N weights `W_i` and activations `A_i`, bit column `b` adds
`2^b * sum_i W_i[b] * A_i`, and a zero bit costs nothing if it can be skipped.
The trouble is that zero bits fall at random, so some columns are dense and
every lane waits for the slowest one.

*Bi-directional bit sparsity* (BBS) closes that gap with one identity:

    sum_{i : W_i[b]=1} A_i  =  sum_i A_i  -  sum_{i : W_i[b]=0} A_i

If a column has more ones than zeros, invert it. Add up the activations at
the (now few) set bits and subtract the result from the group's activation
sum. At most half of the bits of any column then need work. So a
group of 8 never needs more than 4 adder inputs, and all PEs finish each
column in exactly one cycle.

BBS also compresses. A bit column that is all zeros or all ones needs no
storage: its product is 0 or `sum A`. Offline pruning software makes the
low-order columns of each 32-weight group identical across the group. It
replaces them with one shared constant and drops redundant copies of the
sign bit. The accelerator then stores only `ncol` columns per group plus 8
bits of metadata.

This repository holds synthesizable SystemVerilog for the accelerator, called
BitVert in the BBS paper (Chen, Meng, Seo, Abdelfattah, "BBS: Bi-directional
Bit-level Sparsity for Deep Learning Acceleration"). It also holds
self-checking testbenches. The PE and the scheduler follow the paper's
description closely. The paper describes the array organisation, the buffers
and channel reordering as functions, not circuits, so their details here are
this implementation's own. Each such choice is marked below.

## 1. The compressed weight format

Each weight starts as an 8-bit two's-complement value. Per group of 32 weights
(the *compression group*) the pruning software picks:

* `R` (0..3) **redundant columns**. These are copies of the sign bit just
  below the MSB that are identical in all 32 weights. Removing them leaves a
  `P = 8 - R` bit two's-complement number with the same value.
* `S` **pruned low columns**, whose bits are the same in every weight of the
  group. Their common value is the 6-bit **BBS constant** `C`.

What remains is `ncol = P - S` stored bit columns per weight, MSB first. A
weight's value is

    w = -bit_{P-1} * 2^(P-1) + sum_{b=S}^{P-2} bit_b * 2^b + C

The metadata byte of a group is `{R[1:0], C[5:0]}`. `ncol` is fixed for a whole
*chunk* of channels: 8 for "sensitive" channels kept at full precision, 6 for
conservative pruning (2 columns removed), 4 for moderate pruning (4 removed).
The hardware accepts any `ncol` from 2 to 8. It needs at least 2 because the
BBS multiplier is time-multiplexed over two cycles. The constant is treated
as an unsigned value added to every weight. With zero-point shifting, the
software must express the shift that way (the paper's own example stores +14
for a shift of -14).

## 2. One PE, one cycle (`bv_pe`, `bv_scheduler`)

A PE holds 16 activations. Each cycle it consumes one 16-bit weight bit
column, split into two sub-groups of 8.

**Scheduler, per sub-group** (one scheduler per weight channel, shared by the 16
PEs of that channel's array column):

1. *Column selection*: popcount the 8 bits. If it is more than 4, invert the
   column and set `inv` (the paper calls it `psum_sel`).
2. *Activation index generation*: four priority encoders in a chain. Encoder
   `k` looks at bits `k..k+4`. It reports the position of the first set bit
   as `sel_k` (0..4) with `val_k = 1`, clears that bit, and passes the rest to
   encoder `k+1`. An encoder with nothing to report drives `val_k = 0`.

   Why four 5-input windows are enough: at most 4 bits remain after
   inversion. The `k`-th of them (counting from 0) cannot lie left of
   position `k`. If it lies further right than `k+4`, the next encoders'
   windows still reach it. The testbench confirms this for every one of the
   65 536 possible 16-bit columns, and an assertion in the RTL flags any
   bit left unscheduled.
3. *Shift control*: at the first column of a group `col_idx = 7 - R`. It then
   counts down by one per cycle. `is_msb` marks that first column, whose
   weight is negative.
4. *BBS constant*: the PE's constant multiplier is 3 bits wide. The scheduler
   sends `C[2:0]` in the first column cycle and `C[5:3]` with `bhi = 1`
   (shift by 3) in the second. It sends zero in all later cycles.

The scheduler registers everything, so its control reaches the PEs one cycle
after the column.

**PE datapath** (single cycle into a 24-bit accumulator):

    term_k   = val_k ? A[s*8 + k + sel_k] : 0             four 5:1 muxes per sub-group
    sub_s    = inv_s ? (sumA_s - sum_k term_k) : sum_k term_k      11 bit
    psum     = sub_0 + sub_1                                       12 bit
    shifted  = (is_msb ? -psum : psum) << col_idx                  20 bit
    prod     = (sumA_0 + sumA_1) * bconst << (bhi ? 3 : 0)         18 bit
    out     <= (shift ? out_prev : out) + (acc_en ? shifted + prod : 0)

A group therefore takes exactly `ncol` cycles for every channel. There are
no stalls and no synchronisation between PEs.

## 3. The array and its dataflow (`bv_pe_array`, `bv_suma_gen`, `bv_ctrl`)

The array is 16 rows by 32 columns and output-stationary. Row `r` computes
input window `r`. Its 16 activations and its two sub-group sums (from the
shared activation-sum generator) are broadcast to all 32 PEs of the row.
Column `c` computes weight channel `c`, and scheduler `c` drives all 16 of
its PEs. So each weight bit column read serves 16 windows, and each
activation group serves 32 channels.

A **job** runs one chunk of channels of equal precision. The sequencer's loops,
outermost first:

    for cb  in channel blocks (32 channels)
      for wt in window tiles (16 windows)
        for g in reduction groups (16 activations)     -> new activations + metadata
          for j in 0 .. ncol-1                          -> one bit column, 1 cycle
        flush 2 cycles, then drain 32 cycles

Pipeline: stage 0 issues the buffer reads. In stage 1 the buffers return
data and the schedulers and sum generator register their results. In stage
2 the PEs accumulate. A tile costs `kgroups*ncol + 34` cycles, and a job
takes `nchb*nwt*(kgroups*ncol + 34)` cycles from `start` to `done`. The
moderate setting (`ncol = 4`) finishes 16 multiply-accumulates per PE in 4
cycles.

**Readout.** The paper's PE has an `out_prev` input into its accumulator mux
and says that outputs leave the array one column at a time. Here `out_prev`
forms a shift chain: each PE takes its left neighbour's output, and column 0
takes zero. During the drain the array shifts right once per cycle. The
rightmost column (channel 31 first, channel 0 last) goes to the output buffer.
The zeros shifted in clear the accumulators for the next tile. The array
does not compute during the 32 drain cycles. This drain scheme is this
design's choice.

**Channel unshuffle.** Channel reordering stores channels of equal precision
together, so the array sees them permuted. The channel index buffer holds
each stored channel's original index. The output buffer writes a column to
`o_base + wt*o_stride + original_index`, so results land in the original
channel order. That matters when two differently reordered weight tensors
read the same input and their outputs are added, as in a residual block.

## 4. Programming it (`bitvert_top`, `bv_pkg`)

The host fills the buffers through plain write ports, sets `cfg`, pulses
`start`, waits for the one-cycle `done` and reads the output buffer. Layout
(this design's choice):

| buffer | size | word | address |
|---|---|---|---|
| weight | 256 KB: 4096 x 32 banks x 16 bit | bit column `j` of 16 weights, per channel bank | `w_base + (cb*kgroups + g)*ncol + j` |
| input | 256 KB: 1024 x 16 banks x 16 x 8 bit | 16 activations of one window (im2col form) | `i_base + wt*kgroups + g` |
| metadata | 1024 x 32 banks x 8 bit | `{R, C}` per 32 weights | `m_base + cb*ceil(kgroups/2) + g/2` |
| channel index | 4096 x 12 bit | original channel index | `c_base + cb*32 + c` |
| output | 2048 x 16 x 24 bit | one channel, 16 windows | `o_base + wt*o_stride + original_index` |

`cfg` fields: `ncol` (2..8), `kgroups`, `nchb`, `nwt`, the five bases,
`o_stride` (channels in the layer) and `acc_out`. With `acc_out` set, the
write-back adds to the stored word. A reduction too long for the buffers
(VGG-16's FC6 layer, Llama-3-8B's down projection) can then run as several
jobs. The 256 KB weight and input buffers and the 8-bit metadata are the
paper's sizes. The other depths are assumptions.

Capacity per job: `kgroups <= 1023`, `32*K*ncol/8` bytes of weights
`<= 256 KB`, `nwt*kgroups <= 1024`, `nwt*o_stride <= 2048`. The linear and
convolution layers of VGG-16, ResNet-34/50, ViT-S/B, BERT-base and
Llama-3-8B all fit after host-side tiling. Attention's activation-by-activation
products are outside what this datapath runs.

## 5. Where this RTL departs from, or adds to, the paper

* **Activations are signed 8-bit.** The paper prints the widths (8, 11, 12 bits)
  but not the signedness. Signed values fit those widths.
* **Shifted psum is 20 bits**, not the 19 printed in the paper's figure.
  `-(-2048) << 7` needs 20.
* **BBS constant is unsigned.** The paper describes it both as "the bits of the
  pruned columns" and, for zero-point shifting, as a signed shift. The first
  reading is implemented.
* **The slice order of the time-multiplexed constant** (low 3 bits first) is a
  choice.
* **The controller, buffer layout, drain-by-shifting, two-cycle flush,
  accumulate-on-write and all buffer depths except the two 256 KB ones** are
  this design's. The paper has no controller.
* **Buffers are plain arrays** that behave as 1R1W synchronous SRAMs (one-cycle
  read, data held when not read). They are not foundry macros.
* **Not built:** the off-chip DRAM and any DMA, input window formation
  (im2col), requantisation of outputs, and the offline pruning algorithms. The pruning algorithms exist only as a
  software model inside `tb_bv_workloads`.
  Outputs are raw 24-bit sums. The 24-bit accumulator (paper's width) can
  overflow for long reductions with extreme values.

## 6. Simulating

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. The PE, array and
top testbenches share `tb/tb_bv_util.sv`, a reference encoder and weight
decoder written independently of the RTL. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/bv_pkg.sv tb/tb_bv_util.sv tb/tb_bitvert_top.sv \
        --top-module tb_bitvert_top -o sim && obj_dir/sim

`-Irtl` lets Verilator find each module by file name. Swap in another
`tb/tb_<module>.sv` to test one block.

`tb_bitvert_top` runs the full-size design: 16x32 array and 256 KB buffers,
with no parameter changes. It builds a 96-channel layer with `K = 48` and 32
windows, and permutes its channels at random. Chunks have 8, 6 and 4 stored
columns, with random redundant-column counts and constants. It runs one job
per chunk, then repeats the last chunk with `acc_out`, and compares every
output against the integer dot product in the original channel order. It
checks each job's cycle count. It also counts how often each mechanism
occurred, and fails if any never did: column inversion, idle terms,
redundant columns, both constant slices, shift-out and accumulating
write-back. It completes in a few seconds.

`tb_bv_workloads` also runs at full size, but with realistic data. It draws
Gaussian-shaped weights for 96 channels and quantises each channel to int8.
It then compresses them the way the offline pruning would:

* the sensitive chunk keeps all 8 columns;
* the conservative chunk drops 2 columns per 32-weight group by rounded
  averaging;
* the moderate chunk drops 4 columns by zero-point shifting. Every 6-bit
  shift is tried, and the one with the least squared error is kept.

It repeats this for the reduction lengths of the layers the design targets:
a 3x3 convolution over 64 channels (K = 576), and the projections of ViT-S
(384), ViT-B/BERT-base (768) and Llama-3-8B (4096). Every output and every
job's cycle count is checked. It also prints the mean squared pruning error
per chunk, which is about 1.3 for conservative and about 17 for moderate, in
int8 units squared.

Other testbenches: `tb_bv_scheduler` covers all 16-bit columns plus the
shift and constant control. `tb_bv_pe` runs 3000 random compressed groups,
including the `out_prev` path. `tb_bv_pe_array` checks full-size accumulation
and drain order. `tb_bv_ctrl` compares the whole request sequence cycle by
cycle against the loop nest. The buffer testbenches check masks,
banks, read latency, hold and unshuffled addressing.

## 7. Files

`rtl/bv_pkg.sv` holds widths, sizes and the shared types (`bbs_meta_t`,
`sub_ctrl_t`, `col_ctrl_t`, `bv_cfg_t`). Each `rtl/bv_*.sv` is one block, and
`rtl/bitvert_top.sv` wires them together. Changing `GROUP`, `SUBGROUP`,
`ROWS` or `COLS` in the package rescales the design. The 5:1 window and 4
encoders follow from `SUBGROUP/2`.
