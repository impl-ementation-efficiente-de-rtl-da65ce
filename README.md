# Parametric 3x3 convolution blocks for FPGA, and a bank that mixes them

A convolution layer on an FPGA is limited by whichever resource runs out
first: DSP slices, LUTs or carry chains. This design offers the same
operation, a 3x3 fixed-point convolution, as four interchangeable blocks
that spend those resources differently. A layer is then mapped onto a device
by choosing how many of each block to instantiate. The blocks share one
interface and one timing, so they can be swapped or mixed freely:

| block   | multiplier                                  | DSP slices | convolutions per computation |
|---------|---------------------------------------------|-----------:|-----------------------------:|
| `conv1` | shift-and-add partial products (LUTs + carry chains) | 0 | 1 |
| `conv2` | one multiply-accumulate                     | 1          | 1 |
| `conv3` | one multiply-accumulate on two packed operands | 1       | 2 (operands up to 8 bits) |
| `conv4` | two multiply-accumulates                    | 2          | 2 |

`conv_bank` is the top level: a bank of such blocks. Its default mix, 1380
`conv1`, 284 `conv2`, 800 `conv3` and 150 `conv4` blocks at 8-bit data and
coefficients, is an allocation predicted to use about 80 % of the LUTs and of
the DSP slices of a Zynq UltraScale+ ZCU104 while evaluating
1380 + 284 + 2·800 + 2·150 = 3564 convolutions at once.

The block structure (fixed point, serial loading of a locally stored 3x3
kernel, parallel data, the DSP budget and parallelism of each block, the
8-bit limit of `conv3`) and the default bank mix come from the published
description of this block library. That description gives what each block
does and what it costs, not how it is built inside, so the datapaths, the
schedule, the handshake, the packing scheme of `conv3` and the bank wiring
are this implementation's own; they are listed under
"Departures and open points" below.

## What one block computes

Each block holds one kernel `k[0..8]` and, for each of its lanes, computes

    result = sum over t = 0..8 of  win[t] * k[t]

where `win` is a 3x3 window presented in parallel, tap `t = 3*row + col`.
The kernel is not flipped (a correlation, as in CNN layers). Data and
coefficients are signed two's complement of `DW` and `CW` bits; the result is
exact, `DW + CW + 4` bits wide, with no rounding or saturation. The binary
point is the user's business: with `DW = Qm.n` data and `CW = Qp.q`
coefficients the result has `n + q` fraction bits.

The two-lane blocks (`conv3`, `conv4`) apply their one kernel to two windows,
`win_a` and `win_b`, giving `result_a` and `result_b`.

## Timing: one tap per clock

A block works through the nine taps with one multiply-accumulate per clock,
so one computation takes 9 clocks. The control is the same in all blocks
(`tap_seq`):

    clock      0      1      2   ...   8      9
    start      1      x      x         x     (may be 1 again)
    ready      1      0      0         0      1
    tap        0      1      2         8      -
    out_valid  0      0      0         0      1   result valid from here
    win        <------- held stable ------->

* `start` is accepted in a clock where `ready` is high; that clock already
  processes tap 0. A `start` while busy is ignored.
* The window(s) must stay on the inputs from the start clock to clock 8: the
  blocks do not copy the window into registers (an assertion checks this in
  simulation).
* `out_valid` is high for one clock, 9 clocks after `start`; `result` then
  holds until the next start.
* `ready` is high again in the `out_valid` clock, so a new request can be
  chained there: back to back, a block delivers one result (two for `conv3`
  and `conv4`) every 9 clocks.
* `rst_n` (active low, synchronous) clears the control state only.

## Loading a kernel

Coefficients arrive serially, one `CW`-bit word per clock with
`coef_load` high, tap 0 first. The store (`coef_store`) is a nine-deep shift
register, which an FPGA implements in LUT shift registers rather than in
flip-flops. After nine loads the kernel is complete; fewer loads leave it
shifted. Loading while a computation runs is not allowed (asserted). The
store has no reset: it holds nothing meaningful until loaded.

## Two convolutions on one multiplier (`conv3`)

`conv3` gets two convolutions out of one multiplier by packing the two data
words of the current tap into one wide operand:

    P    = xa * 2^S + xb                (xa, xb sign-extended)
    P*k  = (xa*k) * 2^S + xb*k

Accumulating nine such products in a single register gives

    acc = A * 2^S + B,      A = sum xa*k,   B = sum xb*k.

The offset is `S = DW + CW + 3`. Nine products of a `DW`-bit and a `CW`-bit
signed number never exceed `9 * 2^(DW+CW-2)` in magnitude, which is below
`2^(S-1)`, so `B` fits in the low `S` bits as a signed number and never
spills into `A`. Unpacking:

    B = acc[S-1:0]  read as signed
    A = (acc - B) >> S

When `B` is negative, the low field has borrowed from the high field;
subtracting `B` before the shift gives that borrow back, so both lanes come
out exact. The packed operand has `S + DW + 1` bits (the extra bit holds
`xa*2^S + xb` when both are the most negative value). At 8 bits the
accumulator needs 2 x 19 = 38 bits, inside the 48-bit accumulator of a DSP
slice; wider operands would no longer fit one slice, so `conv3` refuses
`DW` or `CW` above 8 at elaboration.

## The bank (`conv_bank`)

Blocks are numbered `0 .. NBLK-1` in the order conv1, conv2, conv3, conv4;
convolutions (window inputs, results, `out_valid`) are numbered
`0 .. NCONV-1` in the same order. Block `j` of the conv3 (or conv4) group owns
the two consecutive slots `base + 2j` (lane a) and `base + 2j + 1` (lane b):

| group | blocks              | convolution slots            |
|-------|---------------------|------------------------------|
| conv1 | `0 .. N1-1`         | `0 .. N1-1`                  |
| conv2 | `N1 .. N1+N2-1`     | `N1 .. N1+N2-1`              |
| conv3 | `N1+N2 ..`          | `N1+N2 ..`, two per block    |
| conv4 | `N1+N2+N3 ..`       | `N1+N2+2*N3 ..`, two per block |

`coef_in` is one serial bus shared by every block; `coef_load[b]` selects
which blocks take it, so a kernel can go to one block or to any group at once
in 9 clocks. `start[b]` and `ready[b]` are each block's handshake. The blocks
are independent: the bank adds no scheduling of its own.

Parameters: `DW`, `CW` (default 8), `N1`, `N2`, `N3`, `N4` (default 1380, 284,
800, 150). Other allocations that use about 80 % of the same device, each
with one kind of block only, are 1770 `conv1` (no DSP), 1382 `conv2`, 1382
`conv3` (2764 convolutions) or 691 `conv4`; they are the same module with
other counts.

## Departures and open points

* **Throughput.** The blocks are described as doing "one convolution per
  cycle" (`conv1`, `conv2`) or two (`conv3`, `conv4`). Here a cycle is a
  computation of 9 clocks. A one-clock 3x3 convolution would need nine
  multipliers, while the reported costs are of one multiplier per lane
  (about 104 LUTs for `conv1` at 8x8 bits, about 25 LUTs plus one DSP for
  `conv2`), and the `conv2`/`conv3`/`conv4` flip-flop counts do not depend on
  the data width, which fits an unregistered window read one tap at a time.
* **Shared kernel in the two-lane blocks.** Both lanes use one kernel on two
  windows. The source does not say whether the two parallel convolutions
  share the kernel or the window.
* **`conv3` packing.** The scheme above is one standard way of sharing a
  multiplier; the original one is not described.
* **Signed arithmetic, exact result width, no rounding**: choices of this
  design.
* **Handshake, window-hold rule, reset, coefficient order**: choices of this
  design.
* **Bank wiring** (broadcast coefficient bus, per-block start, numbering):
  choice of this design; the source gives only the number of blocks of each
  kind.
* **Resource figures.** The cost figures reported for the original blocks
  (LUT, flip-flop, carry-chain and DSP counts as functions of `DW` and `CW`)
  have not been reproduced with this RTL. One known difference: the original
  `conv3` uses the same number of LUTs (35 to 37) whatever the data width,
  whereas here the window multiplexers of `conv3` grow with `DW`.
* Nothing here targets a vendor primitive: the multipliers are written
  behaviourally, with a `use_dsp` attribute (`no` for `conv1`, `yes` for the
  others) as a hint to FPGA synthesis.
* The resource models (polynomials predicting LUTs from `DW` and `CW`) that
  accompany the library are design-time software and are not part of the RTL.

## Files

| file | contents |
|------|----------|
| `rtl/conv_pkg.sv`    | shared constants (`TAPS = 9`, result width) |
| `rtl/coef_store.sv`  | serial-loaded nine-entry kernel store |
| `rtl/tap_seq.sv`     | tap counter and handshake shared by the blocks |
| `rtl/conv1.sv`       | logic-only block |
| `rtl/conv2.sv`       | one-DSP block |
| `rtl/conv3.sv`       | two convolutions on one packed multiplier |
| `rtl/conv4.sv`       | two convolutions on two multipliers |
| `rtl/conv_bank.sv`   | top level: bank of blocks |
| `tb/*_tb.sv`         | one self-checking testbench per module; `conv_bank_tb` (reduced bank) and `conv_bank_full_tb` (default size) run the whole bank; `conv_width_sweep_tb` covers all width pairs |

## Verification

Every testbench compares the outputs with sums of products it computes
itself, checks the 9-clock latency and the 9-clock back-to-back period, and
prints `TB_RESULT checks=N failures=M`. The block testbenches use random and
extreme kernels and windows (most negative and most positive values) and also
run a second instance at other widths (16/12, 16/16, and 5/3 for `conv3`).
`conv_bank_tb` drives a bank of 3+2+3+2 blocks through broadcast and
per-block kernel loads, a simultaneous start of all blocks and 3000 clocks of
random traffic with back-to-back requests and ignored starts, and counts
each of these events, plus `conv3` results where the packed low lane is
negative. `conv_bank_full_tb` does the same at the default size (2614 blocks,
3564 convolutions) with a shorter random phase; it takes about four minutes
to build and under two to run. `conv_width_sweep_tb` instantiates `conv1`,
`conv2` and `conv4` at every pair of data and coefficient widths from 3 to
16 bits (196 pairs each) and `conv3` at every pair from 3 to 8 bits (36),
and checks all 624 blocks on shared random and extreme data.

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
        rtl/conv_pkg.sv tb/conv_bank_tb.sv --top-module conv_bank_tb -o sim
    ./obj_dir/sim

Replace `conv_bank_tb` by any other testbench name. Simulation is two-state
friendly: everything that is read is reset or loaded first.
