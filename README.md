# A reconfigurable RPE + MAT accelerator for EfficientViT

EfficientViT mixes two kinds of work. Its MBConv blocks are pointwise (1x1),
depthwise (k x k, one filter per channel) and pointwise convolutions again.
Its attention is a linear, Softmax-free "ReLU attention":

    O_i = ReLU(Q_i) (sum_j ReLU(K_j)^T V_j)  /  ReLU(Q_i) (sum_j ReLU(K_j)^T)

A plain multiplier/adder-tree array suits the pointwise convolutions and
matrix products, which make up most of the work. It suits the depthwise
convolutions badly, because they give it no input-channel dimension to reduce
over. This design therefore gives every processing group two engines:

* a **RPE** (reconfigurable processing element) engine of M PE lines x N MACs.
  It switches between a depthwise mode, where every MAC accumulates its own
  sum, and a pointwise mode, where the products of a line are summed down
  the line;
* a **MAT** (multipliers and adder trees) engine of S lanes x T multipliers,
  for pointwise convolution and matrix products only.

The two engines of a group run different jobs at the same time. While the
RPE computes a depthwise layer, the MAT computes the pointwise layer after it
from the depthwise results in a shared auxiliary buffer. While the RPE
computes `ReLU(K)^T V` and `sum ReLU(K)^T` for one attention head, the MAT
multiplies the previous head's results with `ReLU(Q)` and divides. This
pairing is called time-multiplexed and pipelined (TMP) dataflow below.

The RTL is written in synthesizable SystemVerilog. Its defaults are the
configuration L = 16 groups of (8x8 + 8x8) multipliers, 2048 int8
multipliers in all. At 200 MHz their peak is 819 GOPS, so the reported
780 GOPS for EfficientViT-B1 means about 95 % of the multipliers stay busy.

## Block structure

```
                 buffer A (global)            buffer C (global)        output buffer
                 DW: inputs                   PW: weights              (S results x L groups
                 PW: weights (per PE line)    MSA: Q                    per write)
                 MSA: V                          |                          ^
                    | slice l                    | slice l                  |
  +-----------------|----------------------------|------------- PG l (x L) |-----+
  | buffer B ---+   v                            v                          |     |
  | (DW: w,     +-> sel -> [ReLU] -> RPE engine (M lines x N MACs)          |     |
  |  PW: input, |     |               |                                     |     |
  |  MSA: K)    |     +-> K-adder-tree|                                     |     |
  |             |                     v                                     |     |
  |             |       requant -> re-arrange -> auxiliary buffer <-> DRAM   |     |
  |             +-------------------------------------+   |                 |     |
  |                                                   v   v                 |     |
  |                     MAT engine (S lanes x T) <- broadcast               |     |
  |                         |--> divisor buffer --> post-processing --------+     |
  +---------------------------------------------------------------------------------+
                 tmp_ctrl: RPE sequencer + MAT sequencer, shared by all groups
```

| module | role |
|---|---|
| `evit_accel` | top: buffers A, C and output, `L` groups, controller |
| `pg` | one processing group |
| `rpe_engine`, `rpe_line` | the RPE array and one PE line |
| `k_adder_tree` | row sums of ReLU(K^T) during the KV product |
| `mat_engine`, `mat_unit` | the MAT engine and one lane |
| `rearrange` | turns RPE results into MAT-shaped vectors in the aux buffer |
| `aux_buffer` | per-group buffer between the engines (1 write + 1 external write, 3 reads) |
| `divisor_buffer` | holds the S attention divisors of a token group |
| `post_proc` | requantize / ReLU / Hardswish, or the attention division |
| `sdp_ram` | buffers A, B, C and output |
| `tmp_ctrl` | the two job sequencers and their synchronisation |
| `evit_pkg` | types, job descriptors, control words, arithmetic helpers |

Parameters (`evit_accel`): `L=16, M=8, N=8, S=8, T=8`. The re-arrange unit
needs `M == N == T`. Buffer depths are constants in `evit_pkg`: A 256 x 8192
bits, C 256 x 8192 bits, B 512 x 64 bits per group, aux 512 x 64 bits per
group, output 256 x 1024 bits. Together that is about 147 36-Kbit block RAMs,
within the 160 the FPGA implementation used.

## The RPE in depthwise mode

MAC row n of the array works on channel n, and PE line j on output pixel j
of a row of M output pixels. Each channel has a shift register of M pixel
slots; slot j feeds line j. Every cycle the weight of one kernel tap (one
value per channel) is broadcast to all lines, and each MAC adds
`slot * weight` to its own accumulator. A kernel row starts with a parallel
load of M pixels. Each further tap either shifts (slot 0 drops out and the
next pixel enters slot M-1) or reloads. After the k x k taps, line j holds
the N channel outputs of pixel j.

Stride 1, 3x3, M = 8 (pixels numbered from 0 along the row):

| step | pixels in slots 0..7 | tap |
|---|---|---|
| 0 | load 0..7 | 0 |
| 1 | shift, 8 enters | 1 |
| 2 | shift, 9 enters | 2 |
| 3 | load row r+1: 0..7 | 3 |

Stride 2 needs pixels 2j, 2j+1 and 2j+2 for output j. The even pixels are
loaded first and shifted; the odd pixels follow:

| step | pixels in slots 0..7 | tap |
|---|---|---|
| 0 | load 0,2,...,14 | 0 |
| 1 | shift, 16 enters | 2 |
| 2 | load 1,3,...,15 | 1 |

For a k x k kernel with stride 2 the taps visited are 0, 2, 4, ... and then
1, 3, .... Each group starts with a load. Either way a tile takes exactly
k*k cycles. The engine only executes load and shift; `tmp_ctrl` generates
the order.

**Data layout (host side).** During a depthwise job buffer A is read at
consecutive addresses, one word per step. The host writes a load word
(slot j = pixel j of the load, N channels each) or a shift word (the
entering pixel in slot 0) in the order of the table above. The weights sit in
buffer B at `in_base + row*k + tap`, one word of N channel weights per tap.
Padding is not generated; the host stores padded rows.

## The RPE in pointwise mode, and matrix products

In pointwise mode an N-vector from buffer B (or from the aux buffer) is
broadcast to all M lines. Line j takes its own N weights from buffer A. The
N products of a line are added down the line, and the last MAC of the line
accumulates them over the input-channel chunks, so line j gives output
channel j of the pixel. Each pass leaves one M-vector, which goes to the aux
buffer.

`ReLU(K)^T V` uses the same mode with tokens as the reduced dimension.
Broadcast row a of `ReLU(K^T)` (N tokens) and give line j column b0+j of V
over the same tokens; line j then accumulates `Z[a][b0+j]`. The
K-adder-tree adds the same broadcast vector, which gives
`Ksum[a] = sum_n ReLU(K[n][a])` for free.

## The attention split across the two engines

An `OP_KV` job on the RPE covers one head of dimension d. Its loops are:
feature groups `ag` of T rows, column groups `bg` of M, rows of the group,
and token chunks of N. The re-arrange unit collects T rows of Z (and their
Ksum values) into an 8x8 tile. It then writes to the aux buffer, in order:
the Ksum vector (only for the first column group), then the M tile
*columns*. These are the vectors `Z[a0..a0+T-1][b]` that the MAT needs. For
head dimension d the aux layout from the job's base is, per feature group
`ag`: `[Ksum_ag, Zcol(b=0), ..., Zcol(b=d-1)]`, that is 1+d words.

A `MAT_MSA` job then runs d+1 passes over the ag chunks, with
`pstride = 1, cstride = 1+d`. MAT lane s holds query row i_s (from buffer C,
made non-negative on the way in). Pass 0 broadcasts the Ksum chunks and
yields the S divisors `ReLU(Q_i) . Ksum`, which go to the divisor buffer.
Pass 1+b broadcasts the Z column b and yields the dividends. Post-processing
divides each dividend by its lane's divisor and writes S outputs per group
to the output buffer at `out_base + b`.

## TMP dataflow: jobs, stalls and synchronisation

This is the part that needs the most care when using the RTL.

**Jobs.** The host gives the RPE sequencer `rpe_job_t` descriptors and the
MAT sequencer `mat_job_t` descriptors (see `evit_pkg`) over valid/ready
ports. Each sequencer runs one job at a time and takes the next one as soon
as it has issued the last cycle of the current one. The sequencers are
independent, so fusion is expressed by what the host queues:

* MBConv `PW_1 + DW + PW_2`: the RPE runs the DW jobs (one per N-channel
  group of a tile) and writes pixel vectors to the aux buffer. At the same
  time the MAT runs PW_2 from those vectors. Once the DW jobs are done, the
  RPE can take a share of PW_2's output channels with an `OP_PW` job whose
  input comes from the aux buffer (`src_aux`).
* Attention `{KV + Q(KV)}_h`: the RPE runs `OP_KV` for head h+1 while the MAT
  runs `MAT_MSA` for head h. Each head uses its own aux region.

**Synchronisation.** Every vector the re-arrange unit writes carries the
4-bit `seq` of the RPE job that made it. The controller tracks the latest
tag (`cur_tag`) and how many vectors carry it (`prod`). A job with `wait_en`
may read the aux entry at offset `o` from its `in_base` only if

* `cur_tag == wait_seq` and `o < prod`, or
* `cur_tag` is 1 to 7 steps newer than `wait_seq` (modulo 16), meaning that
  producer has finished.

Until then the sequencer does not issue (a *MAT wait*, `mat_stall`). Rules
for the host:

1. Give a producer's writes consecutive addresses starting at the consumer's
   `in_base`. Several RPE jobs may share one `seq` and continue the run.
2. Use tags in increasing order modulo 16, and keep no more than 7 in
   flight.
3. Do not write the aux buffer from outside while a job is writing to it:
   the re-arrange writes take priority and the external write is lost.

**RPE stalls.** After a depthwise tile or KV row group, the re-arrange unit
spends M (or M+1) cycles writing vectors. The sequencer does not issue the
last cycle of the next accumulation while it is busy, or while such a
capture is still in the pipeline (`rpe_stall`). A depthwise tile of k*k >= M
cycles never stalls. Back-to-back KV row groups with few token chunks do.

**Pipeline timing.** Cycle s0 issues the read addresses of buffers A, B, C
and aux. In s1 the data arrive and the engines update their accumulators.
In s2 the results are captured by re-arrange, or post-processed and written
to the output buffer. A pointwise row reaches the aux buffer one cycle after
capture; a drained tile writes one vector per cycle from then on.

## Numerics

Activations and weights are int8. Products are accumulated in 32 bits.
Results leave the RPE (towards the aux buffer) and the MAT (towards the
output buffer) as int8:

* `(acc >>> shift)` is saturated to [-128, 127];
* then ReLU, or Hardswish in Q4.4: `y * clamp(y + 48, 0, 96) / 96`,
  truncated.

Z and Ksum are requantized with the same shift, so their ratio survives. The
attention output is `sat8((dividend << shift) / divisor)`, truncated toward
zero, and 0 when the divisor is 0. BatchNorm is expected to be folded into
the weights. No bias is added.

## Sizes of the evaluated network

The paper evaluates EfficientViT-B1 (stem conv, DSConv, stages S1-S4).
Layer sizes below come from the published B1 configuration (widths
16/32/64/128/256, expand ratio 4, head dimension 16, 224x224 input), not
from the paper:

* The largest pointwise weight set, 256 -> 1024 in S4, needs 32 buffer-C
  words per group of 8 output channels. Buffer C holds 256.
* The S3 attention has 14x14 = 196 tokens, i.e. 25 chunks. `ReLU(K^T)` needs
  16 x 25 = 400 buffer-B words (512 available), V needs 50 buffer-A words,
  and the aux region per head is 34 words.
* Fused DW -> PW needs the depthwise outputs of a whole 8-pixel tile, over
  all expanded channels, in the aux buffer. That is 8 x C_exp / 8 = C_exp
  words. S1-S3 (128, 256, 512 channels) fit in 512 words. S4 (1024) does not:
  those layers have to go through off-chip memory unfused, or be split over
  two passes.

## Departures and open points

* Buffer sizes, word layouts, the job descriptors, the tag scheme, the
  stall rules and the lockstep control of all groups are choices of this
  design.
* The re-arrange unit has a name and a position in the architecture but no
  stated function. Here it is a tile that passes rows through or transposes
  them.
* The weight shifting between PE lines drawn for pointwise mode is not
  modelled. Each line receives its weights directly from its buffer-A slice.
* Buffers A and C are described as sending the same data to every group,
  which then splits it over its lines. Here each word of A and C is L slices
  wide, one per group, so groups can work on different output channels or
  pixels. Data that all groups share must be replicated by the host.
* Depthwise partial sums are said to be cacheable in the auxiliary buffer.
  Here a whole k x k window is summed inside the MACs, so no depthwise
  partial sum ever leaves the array. Channels beyond N are separate jobs, and
  only finished pixel vectors reach the auxiliary buffer.
* Two int8 products per DSP slice (a vendor technique used in the FPGA
  build) are not modelled; products are plain 8x8 multiplies.
* The stem convolution (3 input channels) runs in RPE pointwise mode on
  im2col data prepared by the host. No im2col hardware is given.
* The off-chip memory and the host are outside the RTL; the top has buffer
  read/write ports and job ports in their place.
* The attention division is a combinational 48/32-bit divider per MAT lane.
  It is correct but not sized for timing closure at 200 MHz.

## Simulating

Every testbench in `tb/` is self-checking, ends with
`TB_RESULT checks=<n> failures=<n>`, and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/evit_pkg.sv \
          tb/tb_evit_accel.sv --top-module tb_evit_accel
./obj_dir/Vtb_evit_accel
```

Other testbenches build the same way with their own top module.
`tb_evit_accel` runs the full default configuration (16 groups) in well
under a second of simulation after about a minute of compilation. It covers:

* a fused depthwise (3x3, stride 1, Hardswish) -> pointwise layer, split
  between the MAT and the RPE;
* a stride-2 depthwise tile;
* two pipelined attention heads.

It checks every output of every group against a reference model in the
testbench, and checks the RPE cycle counts (k*k per tile, one cycle per
chunk). It also counts MAT waits, RPE stalls and cycles in which both
engines work, and fails if any of them never occurs.
