# A systolic self-attention accelerator for 3-bit integerized ViTs

This RTL computes the self-attention part of a Vision Transformer layer in which
every tensor between blocks is a 3-bit integer code. Layer normalization and
softmax are done in integer arithmetic too. The host sends the quantized layer
input `z` (N tokens of d channels) once. The accelerator then returns, head by
head, the quantized attention result `SA_3b` (N tokens of d/H channels per
head). Projection, concatenation and the residual path stay on the host.

The main idea is that a single systolic-array template covers every stage of
attention. The template is a 2-D MAC array, followed by an element-wise
"post-MAC" row, a systolic "aggregation" chain that reduces across the
columns, a triangular delay line, and an element-wise "post-aggregation" row.
Choosing the contents of each stage turns the template into:

| array | MAC operands | post-MAC | aggregation | post-aggregation |
|---|---|---|---|---|
| Q, K (`qk_array`) | z x W_Q/W_K (weights per head) | Scale+Bias | running mean / M2 | NormQ (normalize + quantize) |
| V (`v_array`) | z x W_V | Scale+Bias | none | 7-threshold quantizer |
| A (`a_array`) | Q x K^T (K held in a weight loading unit) | exponential | row sum | ScaleQ (divide + quantize) |
| AV (`av_array`) | A x V (V held in a weight loading unit) | none | none | 7-threshold quantizer |

Data stay in systolic order between the stages, so no stage needs random-access
memory. Between arrays, only per-lane FIFOs are used.

The default parameters are one DeiT-S attention layer: N = 198 tokens,
d = 384, H = 6 heads of 64 channels.

## Number formats

* All activations crossing an array boundary are 3-bit codes. A quantizer
  produces a count `n` in 0..7: the number of its 7 thresholds that the value
  reaches.
* Signed tensors (Q, K, V, the result) are sent as `n - 4`, i.e. -4..3 in two's
  complement. `sa_pkg::to_signed_code` computes it by inverting the top bit.
* The attention matrix A is unsigned (0..7), so the AV array multiplies an
  unsigned A by a signed V. All weights are signed 3-bit.
* Accumulators are 16 bits. Scale+Bias computes
  `sat16((acc * scale + bias) >>> 8)` with a 16-bit scale and a 32-bit bias for
  each head and channel.

## The systolic timing

A token enters the MAC array skewed: channel (row) r enters one cycle after
row r-1. Column c's sum leaves the bottom of the array `ROWS + c` cycles after
row 0 went in. So the post-MAC row sees column c one cycle after column c-1.
The side band (a valid bit and a 3-bit head tag) travels with the data. The
tag selects the head's weight inside each PE and the head's constants in the
later stages.

The aggregation chain runs left to right along the same skew. Each PE adds its
lane and passes the partial result on. After the last lane, the aggregate
(sum, or mean and M2) travels back right to left through the post-aggregation
row, one lane per cycle. The value of lane i must wait for it. `tri_delay`
holds lane i for `1 + 2*(C-1-i)` cycles: one cycle for the last lane, and two
more for each lane further left. The result therefore leaves in reversed skew,
last lane first. The FIFOs that follow absorb this.

## NormQ: layer normalization without division or square root

`running_stat` is a Welford chain. Lane i updates the mean with
`mu += (x*32 - mu) * round(64/(i+1)) >> 6`, which needs no divider. It also
accumulates `M2 += d * e`. The input is prescaled by 32 so that the mean keeps
5 fraction bits.

`normq` never forms `(x - mu)/sigma`. Each quantization threshold c_j of the
normalized value is folded into a per-channel constant
`P_j = c_j^2 / n * 2^12`, so that "a/sigma > c_j" becomes a sign test plus
`(a^2 << 12) > M2 * P_j`, where `a = x*32 - mu`. The sign rule, for a positive
LayerNorm gain, is:

    hit_j = (a > 0) ? (c_j < 0  or  a^2 term > M2*P_j)
                    : (c_j < 0 and a^2 term <= M2*P_j)

The code is the number of hits. A negative gain, or a per-channel affine
LayerNorm, is absorbed into `P_j` and the `c_j < 0` flags, which are inputs.

## Softmax: a shift-based exponential and a division-free quantizer

`exp_unit` (3 stages) takes the 16-bit score times a per-head scale. It
multiplies by log2(e) ≈ 1477/1024 and splits the base-2 exponent into an
integer part I and a 10-bit fraction f. It approximates 2^f by `1/2 + f/2`:
the fraction is shifted right by one bit, and the top mantissa bit is
overwritten with 1. The mantissa is then shifted by I. The output is an
unsigned 16-bit value, saturated, and equal to 256·e^x within the linear
approximation's error (below 15 %, checked in `tb_exp_unit`). There is no
max-subtraction: the per-head scale must keep scores in range.

`sum_agg` adds one row of exponentials. `scaleq` quantizes `e / S` against 7
thresholds Δ_j without dividing: code = number of j with
`e * 2^16 >= S * Δ_j`.

## Q·K^T and A·V: the weight loading unit

In the A array, the "weights" are the K tokens of the current head. In the AV
array, they are the V tokens. Both change every head. `weight_loader` is a
shift chain that the FIFO fills with one token per cycle, in parallel order.
It sits behind a bank of registers that feed the PEs (the "latches"). On
`en`, the whole chain is copied into the registers in one cycle. The chain can
then refill with the next head's keys while the current head streams. The chain
runs along the columns for K (one key per column) and along the rows for V
(one value token per row).

`mm_ctrl` sequences each of these two arrays:

1. Wait until the loader is full and the latch is allowed.
2. Latch.
3. Stream exactly N tokens of Q (or of A) out of their FIFO.
4. Let the pipeline drain.

## Head time-multiplexing and flow control

`input_buffer` has two banks of N tokens. While one bank is being received,
the other is replayed H times, once per head, with the head tag. The first
pass of a bank starts only after the whole input has arrived. `reuse` marks
the replays.

Every pass enters the Q, K and V arrays together. K and V are popped in
parallel order into the two loaders, and Q waits in a systolic-order FIFO.
The following rules make sure no FIFO can overflow (FIFO depths 3N, and 2N in
front of the output):

* A new pass may start only when fewer than two passes are ahead of the Q·K^T
  latch and fewer than three are ahead of the A·V latch.
* The Q·K^T latch may run at most one head ahead of the A·V latch.
* The A·V latch waits until the result FIFO has room for a full head.

In steady state, a head costs about 3N cycles. The Q·K^T array holds each key
set for N cycles of Q plus the drain. The paper's own estimate of the pitch
is `max(N+d, d/H+2N)` = 582 cycles for DeiT-S, and 594 cycles once the host
link is included. In the reduced end-to-end test (N = 12, d = 24, H = 3), a
head completes every 38 to 48 cycles. The paper's formula gives 36 for that
size.

## Host interface

Both directions carry 64-bit words with valid/ready:

* An input token (d codes, 3·d bits) is sent as ⌈3d/64⌉ words, least
  significant first.
* An output token (64 codes = 192 bits) is three words. Word w holds channels
  21w..21w+20.

Results come out head 0 first, in token order. The weights (`w_q/w_k/w_v`,
indexed `[head][channel][column]`) and all per-head constants are plain input
ports. They must stay constant while a layer runs. They stand in for the
parameter storage, which is not part of this RTL.

## Files

| file | content |
|---|---|
| `rtl/sa_pkg.sv` | sizes, widths, the side-band struct, code conversion |
| `rtl/mac_pe.sv`, `rtl/mac_array.sv` | 3-bit MAC PE with a per-head weight bank; the skewed 2-D array |
| `rtl/weight_loader.sv` | shift chain + latch bank for K or V |
| `rtl/scale_bias.sv`, `rtl/quantizer.sv` | post-MAC affine step; 7-threshold quantizer |
| `rtl/running_stat.sv`, `rtl/normq.sv` | Welford chain; square-root-free NormQ row |
| `rtl/exp_unit.sv`, `rtl/sum_agg.sv`, `rtl/scaleq.sv` | softmax stages |
| `rtl/tri_delay.sv` | per-lane delay line (triangular delay and input skew) |
| `rtl/lane_fifo.sv` | per-lane FIFO, parallel or systolic read |
| `rtl/qk_array.sv`, `rtl/v_array.sv`, `rtl/a_array.sv`, `rtl/av_array.sv` | the four array types |
| `rtl/mm_ctrl.sv` | latch/stream/drain controller for the A and AV arrays |
| `rtl/input_buffer.sv`, `rtl/deserializer.sv`, `rtl/serializer.sv` | input reuse and the 64-bit link |
| `rtl/sa_accel.sv` | top level |

## Simulating

Each `tb/tb_<block>.sv` is self-checking and prints
`TB_RESULT checks=… failures=…`. For example:

    verilator --binary --timing --assert -Irtl rtl/sa_pkg.sv tb/tb_normq.sv \
        --top-module tb_normq -y rtl && ./obj_dir/Vtb_normq

`tb_sa_accel` runs the whole accelerator at N = 12, d = 24, H = 3 with two
inputs back to back and a randomly stalling receiver. It checks:

* every output code against a bit-exact integer model written in the testbench;
* every intermediate Q, K, V and A code at the array outputs;
* that input reuse, pass gating, input backpressure, output backpressure and
  both latches all happened.

It also prints the completion cycle of each head.

The largest size simulated end to end is N = 66, d = 128, H = 2
(64-channel heads), using the same testbench with those three sizes. All
85,012 data checks passed. The pass gate never had to stall at that size,
because with only two heads nothing runs far enough ahead. Heads completed
about 400 cycles apart. That is twice the paper's formula for this size
(196). Part of the gap is the output link: the receiver is ready 3/4 of the
time, so 198 words need about 264 cycles. The rest has not been analysed;
the latch-to-latch spacing of the two controllers is the first suspect.
The DeiT-S defaults pass both tools' elaboration, but the end-to-end
testbench has not been run at that size. The Verilator model of the full
array (about 100k PEs) did not finish building within 15 minutes.

## Where this RTL departs from, or adds to, the paper

* **Exponential.** The paper writes the fraction term as x/2 + 1/2 and calls it
  exact at the ends of its range. It also describes the term as a one-bit
  shift with a bit overwritten. This RTL implements the shift-and-overwrite
  form.
* **ScaleQ thresholds.** The figure labels thresholds Δ_0..Δ_7, but the text
  uses seven comparators for a 3-bit output. Seven are built.
* **Not in the paper.** These are this design's choices:
  * all internal word widths;
  * the head-tag side band;
  * FIFO depths;
  * the pass and latch gating rules;
  * the ping-pong input banks;
  * the host word format.
* **Not built.** These parts have no RTL here:
  * the host-side quantizer and projection;
  * the PCIe link (replaced by the 64-bit stream);
  * the parameter storage and feeding (replaced by input ports);
  * the FPGA's DSP blocks (the multipliers are plain logic).
* **Sizes.** At the defaults, the design holds DeiT-S exactly. DeiT-T and
  DeiT-B need other `DM`/`NH` values, which the RTL accepts as parameters.
