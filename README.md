# L2R-CIPU: a CNN convolution tile built from left-to-right inner-product units

Bit-serial CNN accelerators usually work least significant bit first, so a
unit that consumes a result has to wait until the producer has finished. The
L2R-CIPU tile instead computes *most significant digit first* (MSDF,
"left to right"), with redundant signed digits, so that results leave a unit
as a stream that starts before the computation is complete and needs no carry
propagation on the way. Its building block is a **composite inner-product
unit**: rather than k separate serial multipliers feeding an adder tree, one
unit handles all k products of a 3x3x8 convolution window together, one digit
pair per cycle.

This RTL implements one accelerator tile: an 8 x 8 array of processing
elements (PEs), each with one such unit, fed from an input-activation buffer
(one 3x3x8 window per PE), a weight buffer (eight 3x3 kernels shared by all
PEs), sequenced by a control unit, and writing into an output buffer. One tile
computes an 8 x 8 block of output pixels of one output channel, in passes of
8 input channels each.

It follows the published description of the L2R-CIPU design (Nisar, Ibrahim,
Usman and Lee, Chosun University). That description gives the block diagram
of the inner-product unit, the tiling and the sizes; the number system, the
digit selection, the control protocol and several widths are choices made
here, and are pointed out below.

## The arithmetic

### Operands as signed digits

Every activation and weight is an 8-bit two's complement integer. On the way
out of the buffers it is read as 8 radix-2 signed digits, most significant
first, each in {-1, 0, +1} and carried on two wires `{p, n}` with value
`p - n` (`l2r_pkg::sd_t`). No arithmetic is needed: digit 0 (weight 2^7) is
`-x[7]`, digit d (weight 2^(7-d)) is `+x[7-d]`.

### The digit-pair schedule

For k = 72 operand pairs (a 3x3 window over 8 channels),

    P = sum_k a_k b_k = sum_i sum_j c_ij 2^((7-i)+(7-j)),   c_ij = sum_k A_{k,i} B_{k,j}

so the unit does not multiply operand by operand: in cycle (i, j) it takes
digit i of all 72 activations and digit j of all 72 weights and forms the 72
one-digit products at once (`lr_ppg`; a product of two signed digits is a
signed digit). `lr_counter_neg` counts the +1 and the -1 products; `c_ij` is
their difference, |c_ij| <= 72. A pass runs i = 0..7 (outer) and j = 0..7
(inner), 64 cycles.

### Two carry-save registers, one compressor

* The **PPR** (partial product row) register builds row i of the digit-product
  array, `PPR <- 2*PPR + c_ij`. At j = 0 its select multiplexer feeds zero
  instead of the old value, which restarts the row.
* The **residual** register is folded in once per row, at j = 7:
  `v = 2*w + row_i`. In all other cycles its select multiplexer feeds zero,
  so the residual is added only when it is updated.

Both registers hold carry-save pairs, and both are fed by the same 6:2
compressor (`lr_compressor_6to2`), whose six inputs are the residual pair, the
two counter vectors and the PPR pair. The counter's -1 count enters inverted;
the compressor's carry-in supplies the +1 that completes its negation.

### Producing output digits

At every fold the unit emits one output digit z in {-1, 0, +1} and subtracts
it from the residual (`lr_digit_sel`):

* **CPA:** the top 4 bits of the sum and carry vectors are added, giving an
  estimate of v in quarters that is never above v and at most 1/2 below it.
  The residual's top bits weigh -2, 1, 1/2, 1/4.
* **SELM:** z = +1 if the estimate is at least 1/4, z = -1 if it is at most
  -3/4, and 0 otherwise.
* **M:** the estimate minus z always fits 3 bits. These 3 bits replace the top
  of the new residual, and the low 15 bits of both vectors are kept as they are.

The residual is scaled so that a row (|row| < 2^L, L = 15 for 72 terms of 8
bits) enters at a quarter of its unit. This keeps |w| < 3/4 in every step.

After the 64 input cycles the residual still holds the less significant part
of P. So L + 2 = 17 **flush** cycles follow. In each of them no operand digits
enter (the operand gate is closed) and the residual is doubled and one more
digit is emitted. Once n + L + 2 = 25 digits have come out, the residual is
provably zero. The digit string, weighted 2^24 down to 2^0, is then exactly the
integer inner product P. A pass therefore takes **64 + 17 = 81 cycles**. The
first digit appears in cycle 8, and digits then follow every 8 cycles until
the flush phase, which emits one per cycle.

The widths follow from this scaling. Each register vector is W = L + 4 = 19
bits: 2 integer bits and L + 2 fraction bits.

### Accumulating output pixels

Each PE (`l2r_pe`) adds every digit straight into its 32-bit accumulator at
the digit's weight, `acc <- acc + z * 2^shift`. The control unit supplies
`shift` with the digit. The first digit of the first pass of a pixel replaces
the accumulator instead of adding to it. Passes over successive groups of 8
input channels thus sum into one output pixel without a separate conversion
of the digit stream.

## The tile

| block | module | role |
|---|---|---|
| control unit | `control_unit` | runs one pass per `start`; emits digit indices, the IPU control word, digit weights, output-buffer write |
| input activation buffer | `act_buffer` | 64 windows CW_1..CW_64 of 3x3x8 activations; presents digit i of every entry |
| weight buffer | `weight_buffer` | kernels K_1..K_8 (3x3 each, one per input channel of the pass); digit j broadcast to all PEs |
| PE array | `pe_array`, `l2r_pe` | 8 x 8 PEs in lock step |
| LR inner-product unit | `lr_ipu` with `lr_ppg`, `lr_counter_neg`, `lr_compressor_6to2`, `lr_digit_sel` | the arithmetic above |
| output buffer | `output_buffer` | captures all 64 accumulators after the last pass; host read port |
| top | `l2r_cipu_top` | wiring, host ports |

Shared types and default sizes are in `l2r_pkg`. Defaults: 8-bit operands,
T_n = 8 channels per pass, 3x3 windows (72 terms), 8 x 8 PEs, 32-bit
accumulators.

### Using the tile

For each output channel and each 8 x 8 tile of output pixels:

1. For each group g of 8 input channels, do the following while `busy` is low:
   * Write the 64 windows through `act_we/act_cw/act_k/act_data`. Entry
     `k = channel_in_group*9 + ky*3 + kx` of window `p = row*8 + col`.
   * Write the 8 kernels through `wgt_we/wgt_kern/wgt_pos/wgt_data`. Use
     `pos = ky*3 + kx`.
   * Pulse `start`, with `first` = 1 for g = 0 and `last` = 1 for the final
     group. Wait for `done`.
2. Read the 64 pixels through `ob_rd_addr`/`ob_rd_data` (combinational). They
   are 32-bit sums, not rescaled or rectified.

A pass keeps `busy` high for 81 cycles, or 82 with `last` (one cycle to copy
the accumulators into the output buffer). `done` pulses once at the end.
There is no overlap between loading and computing: the buffers hold one pass
worth of data. Assertions flag a `start` while busy and buffer writes during a
pass.

Zero padding and channels beyond the layer's count are written as zeros by the
host.

## Performance at the default sizes

One pass does 64 x 72 multiply-accumulates in 81 cycles. At 400 MHz that is a
peak of 45.5 GOPS, counting a MAC as 2 operations. The published figure is
48.97 GOPS, which would correspond to about 75 cycles per pass; the paper does
not give its online delay.

For the 13 convolution layers of VGG-16, with the usual 224 x 224 input, the
tile needs 285 million cycles, 0.71 s at 400 MHz, not counting buffer
loading. The layer sizes are not in the paper. The published total inference
time of 0.86 ms cannot be reconciled with the published throughput for that
network, and is not reproduced.

The published layer-cycle formula has a factor (k x k) + ceil(N/T_n). This
tile's count is instead (n^2 + 17) x ceil(N/8) x ceil(RC/64) x M.

## Where this RTL departs from, or adds to, the paper

* **Number system, digit selection, scaling, flush phase.** These are
  this design's. The paper shows the CPA/SELM/M blocks with their 4- and
  3-bit widths, but not their function. It also gives the unit's latency
  only as n^2 + delta_Mult. Here delta_Mult is 17.
* **Conflicting digit timing.** The paper says both that the residual is
  updated every n cycles and that the first output digit comes after
  n^2 + delta_Mult cycles. This RTL follows the block diagram: one digit per
  row fold, then the flush digits.
* **Register widths.** The paper says the two registers are twice the operand
  width. That is enough for one product, but not for a 72-term row. Here each
  carry-save vector is 19 bits wide. The PPR register also keeps all 19 bits,
  where the diagram marks 2(W-4) going into it.
* **Weight buffer.** It is drawn as kernels of 3x3x1, while each unit sums a
  3x3x8 window. Both are honoured by holding 8 kernels of 3x3, the kernels of
  one output channel for the 8 input channels of a pass.
* **Own choices.** The host interface, the first/last pass protocol, the
  parallel capture into the output buffer and the accumulator width are this
  design's own.
* **No off-chip interface.** Nothing off-chip is modelled: no DRAM, no DMA, no
  output requantisation or activation function.

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>`). Each
compares against a reference computed in the testbench, prints
`TB_RESULT checks=N failures=M`, and has a watchdog.

* `tb_lr_ipu`: 40 random and extreme operand sets (all -128 x -128, etc.).
  Checks that the 25 digits reproduce the exact inner product and that the
  last digit comes in cycle 81.
* `tb_lr_digit_sel`: exhaustive over all 256 input pairs.
* `tb_control_unit`: compares every cycle of passes with all first/last
  combinations against the schedule.
* `tb_l2r_cipu_top`: end to end at the default sizes. It runs a padded 3x3
  convolution of an 8x8x24 feature map into 3 output channels through the host
  ports (three passes accumulate into one pixel). It checks all pixels and the
  pass lengths, and fails if any mechanism never occurred: first pass, accumulating
  pass, pass with and without store, output digits -1/0/+1.
* `tb_vgg16_tiles`: runs single 8x8 output tiles of VGG-16 layers with their
  real input-channel counts (up to 512 channels, 64 passes) through the top.

To simulate one of them with Verilator, for example:

    verilator --binary --timing --assert -Irtl rtl/l2r_pkg.sv rtl/*.sv \
        tb/tb_l2r_cipu_top.sv --top-module tb_l2r_cipu_top
    ./obj_dir/Vtb_l2r_cipu_top

Changing `N_BITS`, `TN` or the array size through the parameters of
`l2r_cipu_top` re-derives L, W and the pass length. The testbenches are
written for the default sizes.

What has not been checked: timing closure, area or power (nothing was
synthesised to gates here), and behaviour with illegal inputs. The digit code
{1,1} counts as 0 and is never produced by the buffers.
