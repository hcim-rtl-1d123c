# HCiM: an ADC-less hybrid analog-digital compute-in-memory macro

An analog compute-in-memory (CiM) crossbar does a matrix-vector product "in
place". The weights sit in the memory cells and the input bits drive the word
lines. Each column then carries an analog partial sum. Normally an ADC per
column, or a shared one, digitises that partial sum, and the ADCs dominate
the macro's energy and area.

This design removes the ADCs. The network is trained so that each column's
partial sum only needs to be known to 1 bit (binary) or 1.5 bits (ternary):

    p = +1 if ps >= alpha,   p = -1 if ps <= -alpha,   p = 0 otherwise   (ternary)
    p = +1 if ps >= 0,       p = -1 otherwise                            (binary)

One or two comparators per column produce `p`. The precision is recovered
with a trained scale factor `s` for every column and every input bit `j`. The
column's final partial sum is

    PS(c) = sum over input bits j of  p(c,j) * s(c,j)

The bit weight 2^j is folded into `s` during training. The scale factors are
small fixed-point numbers (4 bits here), but there are many of them: 4 per
column for 4-bit inputs, so 512 per 128-column crossbar. Fetching them from
elsewhere would bring back the data movement that CiM is meant to avoid.

So the macro stores the scale factors **in a second, digital CiM array** next
to the partial sums. It adds or subtracts them on that array's bit lines:

* `p = +1`: add `s` to `PS`;
* `p = -1`: subtract `s` from `PS`, without storing `-s` as a second copy;
* `p = 0`: do nothing. That column's bit lines, adder and write are switched
  off, which is where ternary quantisation saves energy.

This repository holds SystemVerilog for the whole macro. It also holds
self-checking testbenches for every block and for the macro end to end.

## Contents

| file | block | kind |
|---|---|---|
| `rtl/hcim_pkg.sv` | shared codes (`p`), mode enum, index functions, the 1-bit adder/subtractor | package |
| `rtl/hcim_macro.sv` | the macro, top level | RTL |
| `rtl/input_wl_driver.sv` | activation register; drives bit `j` of every activation onto the crossbar word lines | RTL |
| `rtl/analog_crossbar.sv` | 128x128 1-bit-weight crossbar | behavioural model of an analog block |
| `rtl/comparator_bank.sv` | 1 or 2 comparators per column, giving `p` | behavioural model of an analog block |
| `rtl/dcim_wl_decoder.sv` | read word lines (two rows at once) and write word lines of the digital array | RTL |
| `rtl/dcim_array.sv` | 24x128 SRAM holding scale factors and partial sums; bit-line logic | RTL (memory as an array) |
| `rtl/bl_switch.sv` | bit-line switch: transmission-gate enables TG1/TG2/TG3 per bit column, from `p` | RTL |
| `rtl/sparsity_ctrl.sv` | clock-gate enable and add/subtract select per bit column, from `p` | RTL |
| `rtl/column_peripherals.sv` | read latches, adder/subtractor chain, store data and mask | RTL |
| `rtl/dcim_ctrl.sv` | sequencer for an MVM, plus host access | RTL |
| `tb/tb_<block>.sv` | one self-checking testbench per block | |
| `tb/tb_hcim_macro.sv` | end to end at the default (full) size | |
| `tb/tb_hcim_config_b.sv` | end to end on the 64x64 configuration | |
| `tb/tb_hcim_imagenet_precision.sv` | end to end with 3-bit inputs, 8-bit scale factors and 16-bit partial sums | |
| `tb/tb_workload_conv_tile.sv` | a 128-row tile of a 3x3, 32-channel convolution layer run pixel by pixel | |

## Data path

```
 act_in --> input_wl_driver --wl[128]--> analog_crossbar --col_val[128]--> comparator_bank
                 ^ bs_sel (bit j)                                              | p[128] (2 b)
                 |                                                             v
             dcim_ctrl ----------------------------------------------> p register
              |  | op (phase, group), rows                              |
              |  v                                                      v
              | dcim_wl_decoder --rwl/wwl--> dcim_array <--TG1/2/3-- bl_switch
              |                              |  rbl, rblb, wbl_sf
              |                              v
              |                  column_peripherals <--ce, sub-- sparsity_ctrl
              |                  (Read latch -> Compute -> Store)
              +--- write row ---> dcim_array write port <-- s_data, s_mask
```

The two analog parts are behavioural models: the crossbar and the
comparators. The crossbar's column value is an exact integer count of the
rows where the input bit and the weight bit are both 1. The comparators
subtract a reference `vref`, so this unsigned count becomes a signed partial
sum. They then apply the thresholds above, with one `alpha` per layer. Noise
and non-linearity are not modelled. Each column has one 1-bit weight cell
(bit-slice 1), and the input is streamed one bit per step (bit-stream 1).

`p` is carried on 2 bits: `00` means 0, `01` means +1 and `11` means -1. Bit 1
is therefore the subtract select.

## Layout of the digital array

Getting this layout right is the hardest part of the design. Every other
block follows from it.

At the default configuration the digital array has 128 bit columns and 24 rows:

* rows 0..15 hold scale factors: 4 bit-streams x 128 columns x 4 bits = 16 rows;
* rows 16..23 hold partial sums: 128 columns x 8 bits = 8 rows.

A scale-factor row holds 32 words of 4 bits. A partial-sum row holds 16 words
of 8 bits. An add or subtract must line up bit `b` of the scale factor with bit
`b` of its partial sum on the same bit line. This only works for half of the
scale-factor words at a time. The words of a scale-factor row are called
*odd* (word 2k) and *even* (word 2k+1):

```
bit column:        0   4   8  12  16  20 ...              120 124 127
SF row:           |s0 |s1 |s2 |s3 |s4 |s5 | ...           |s30|s31|
                   odd even odd even ...
PS row, odd:      |  P0   |  P2   |  P4   | ...           |  P30  |       (words at 8k)
PS row, even:     |P31|  P1   |  P3   | ...       |  P29  |P31|           (words at 8k+4, last one wraps)
```

* An **odd-phase** operation adds the odd scale-factor words to a partial-sum
  row whose words start at columns 8k. Each scale factor sits under the low
  half of its partial sum.
* An **even-phase** operation adds the even words to a partial-sum row that
  is shifted by 4 columns. Its last word wraps round the array edge: bits 0-3
  in columns 124-127 and bits 4-7 in columns 0-3.

In the upper 4 columns of a word the scale-factor cell is not connected. It
reads as 0, which zero-extends the 4-bit scale factor to 8 bits.

Crossbar column `c` is split as `g = c / 32` (its group), `h = c % 2` (its
phase) and `k = (c % 32) / 2` (its word). With those:

| item | array row | bit columns (LSB first) |
|---|---|---|
| scale factor `s(c, j)` | `4*j + g` | `4*(c%32) .. 4*(c%32)+3` |
| partial sum `PS(c)` | `16 + 2*g + h` | `(8*k + 4*h + b) mod 128`, b = 0..7 |

In general there are `G = PS_BITS/2` groups of `COLS/G` crossbar columns. There
are `IN_BITS*G` scale-factor rows and `2*G` partial-sum rows. Each bit-stream
needs `2*G` row operations.

## Adding and subtracting on the bit lines

A compute read raises two read word lines: scale-factor row `4j+g` and
partial-sum row `2g+h`. In each bit column, `bl_switch` connects the two
cells to the shared read bit-line pair through transmission gates:

* TG2 connects the scale-factor cell, TG3 the partial-sum cell. Both are
  closed when the column's `p != 0`, and TG2 only over the scale factor's
  4 columns.
* Precharged RBL falls if either connected cell holds 1, so it gives
  `NOR(A,B)`. RBLB falls if either holds 0, so it gives `AND(A,B)`. Here A is
  the partial-sum bit and B the scale-factor bit.
* A borrow cannot be formed from OR/AND alone, because it is asymmetric in A
  and B. For `p = -1` the gate TG1 therefore also puts B on the scale-factor
  array's write bit line `WBL_sf`, which is idle during a read.

The sense amplifiers deliver these as OR and NAND, the complements; the RTL
carries the bit-line polarity (NOR, AND) instead, which is the same
information. `column_peripherals` latches `NOR`, `AND` and `B` at the end of
the read cycle. In the next cycle each column computes:

```
O1   = AND | NOR          = XNOR(A, B)
Sum  = Cin ? O1 : ~O1      = A ^ B ^ Cin               (sum and difference are the same)
Cout = O1 ? AND : Cin      carry of A + B
Bout = O1 ? Cin : B        borrow of A - B  = ~A&B | B&Bin | Bin&~A
next = p[1] ? Bout : Cout  chained to the next column of the word
```

The carry into a word's lowest bit is 0. The carry out of its top bit is
dropped, so partial sums are 8-bit two's complement and wrap modulo 256. The
words of a row are independent chains. In the even phase the chain start is
moved by 4 columns, which the RTL does with a 2:1 rotation mux on the
chain's inputs and outputs.

## Pipeline and schedule

Every row operation takes three one-cycle stages, and a new one starts every
cycle:

```
cycle      0     1     2     3     4     5     6     7     8     9
op0 (g0,odd)  R     C     S
op1 (g1,odd)        R     C     S
op2 (g2,odd)              R     C     S
op3 (g3,odd)                    R     C     S
op4 (g0,even)                         R     C     S
 ...                                                              ...
op7 (g3,even)                                           R     C     S
```

* **R (Read):** both rows are read and the results latched.
* **C (Compute):** the adder/subtractor chain runs and its result is registered.
* **S (Store):** the write driver writes the partial-sum row, only in
  columns where `p != 0`.

No two operations less than 8 cycles apart touch the same partial-sum row.
So there is no hazard and no forwarding.

`dcim_ctrl` runs one MVM after a `start` pulse:

| phase | cycles (default) | what happens |
|---|---|---|
| CLEAR (only if `clear_ps`) | 8 | write 0 to every partial-sum row |
| LOADP | 1 | bit 0 on the word lines; comparator outputs go into the `p` register |
| RUN | 4 x 8 = 32 | per bit-stream: 4 odd-phase, then 4 even-phase operations; the last one reloads `p` for the next bit |
| DRAIN | 2 | the last operations finish C and S |

`done` rises 43 clock edges after the edge that samples `start` when
`clear_ps` is set, and 35 edges after it without. In general the count is
`PS_ROWS + 1 + IN_BITS*PS_BITS + 2`. The partial sums can then be read. The
crossbar and the comparators are assumed to settle within one clock cycle.

## Sparsity

For a column with `p = 0`:

* `bl_switch` keeps TG1-3 open, so the column's bit lines do not discharge and
  need no new precharge;
* `sparsity_ctrl` drops the column's enable `ce`. The read latches and the
  result register do not load; the RTL writes this clock gating as a
  register enable;
* the store mask leaves the partial sum untouched.

The schedule does not change with sparsity: each row operation serves 16
words in parallel, and some of them are usually non-zero.

`active_words`, a top-level output, counts the words being updated by the
operation in its Read cycle. It is an activity figure for power estimation.

## Using the macro

All ports are synchronous to `clk`. `rst_n` is an asynchronous, active-low
reset. Host requests are accepted only while `busy` is low.

1. Write the weights one crossbar row at a time: `w_wr_en`, `w_wr_row`,
   `w_wr_data`.
2. Preload the scale factors with `host_wr_en`, `host_wr_row` (0..15) and
   `host_wr_data`, using the row and column map above.
3. For each input vector:
   * load it with `act_load` / `act_in` (4 bits per row);
   * set `mode` (0 binary, 1 ternary), `alpha` and `vref`;
   * pulse `start`, with `clear_ps` set unless partial sums should keep
     accumulating.
4. After `done`, read partial-sum rows 16..23 with `host_rd_en` and
   `host_rd_row`. `host_rd_data` is valid one cycle later (`host_rd_valid`).
   Unpack the words with the map above.

The array has no reset, like an SRAM. Clear or write the partial sums before
accumulating into them.

## Parameters and configurations

| parameter | default | meaning |
|---|---|---|
| `ROWS` | 128 | crossbar rows |
| `COLS` | 128 | crossbar columns = digital-array bit columns |
| `IN_BITS` | 4 | activation bits = bit-streams per MVM |
| `SF_BITS` | 4 | scale-factor bits |
| `PS_BITS` | `2*SF_BITS` | partial-sum bits; the odd/even layout needs exactly twice `SF_BITS` |
| `CW` | `$clog2(ROWS+1)` | width of a column value, `vref` and `alpha` |

The other parameters (`GROUPS`, `SF_ROWS`, `PS_ROWS`, `NROWS`) are derived and
should not be overridden. These settings have been simulated:

* **Default (configuration A):** 128x128 crossbar, 24x128 digital array.
* **Configuration B:** `ROWS=64, COLS=64`, giving a 24x64 digital array. Each
  operation then serves 16 crossbar columns instead of 32, so the latency
  per column doubles.
* **ImageNet precision:** `IN_BITS=3, SF_BITS=8`, giving `PS_BITS=16` and a
  40x128 digital array. A bit-stream then takes 16 row operations.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and stops. Each has a
watchdog. To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/hcim_pkg.sv tb/tb_hcim_macro.sv \
          --top tb_hcim_macro -Mdir obj && ./obj/Vtb_hcim_macro
```

Replace `tb_hcim_macro` with any other testbench name. The block testbenches
compute their expected values independently of the RTL. For example,
`tb_bl_switch` and `tb_sparsity_ctrl` derive the gate pattern from the
crossbar column towards the bit columns, the opposite direction to the RTL.
`tb_column_peripherals` checks A+B and A-B for every word, plus the 2-cycle
Read-to-Store latency at one operation per cycle. `tb_dcim_ctrl` checks the
whole cycle schedule.

The end-to-end testbenches do the following:

* load random weights and scale factors;
* run five MVMs: ternary and binary, with and without clear, and one on
  partial sums written by the host;
* compare all 128 partial sums after each MVM with a reference computed in
  the testbench;
* check the start-to-done cycle count and the activity output;
* count each mechanism (add, subtract, skip, both modes, clear, accumulate,
  odd phase, even phase, wrapped word) and fail if one never occurs.

`tb_hcim_macro` runs the macro at its default parameters and finishes in well
under a second.

`tb_workload_conv_tile` shows how a network layer maps onto the macro. The
layer is a 3x3 convolution with 32 input and 32 output channels, at CIFAR-10
precision. The macro holds the first 128 of the kernel's 288 unrolled rows.
Each output channel takes 4 columns, one per weight bit. Each of 16 output
pixels is one MVM. The testbench then forms each channel's output as
`sum of 2^b * PS(4o + b)`, as the surrounding system would. About 38% of the
`p` values are 0 with its thresholds.

## How closely this follows the paper's design

These parts follow the description of the design closely:

* the comparator quantisation and the 2-bit code for `p`;
* the 24x128 array split into 16 scale-factor rows and 8 partial-sum rows;
* the double word-line compute read;
* the gate rules for `p` = 0, +1 and -1;
* reading B on `WBL_sf` for the borrow;
* the full adder/subtractor equations;
* the `p[1]` carry/borrow select;
* the three-stage Read/Compute/Store pipeline with odd-phase operations
  before even-phase ones;
* skipping columns with `p = 0` in all three stages.

These are this design's own choices:

* **Row and word map.** The description shows odd and even words and a
  partial-sum row drawn half a word out of step. It does not give the exact
  row numbering, which rows pair up, or how the wrapped word is handled.
* **Upper half of a partial-sum word.** A disconnected scale-factor cell is
  modelled as a 0 operand on both bit lines. The real circuit would need
  something equivalent, which is not described.
* **Gate choice.** The gate forming `O1` (taken as OR of AND and NOR) was
  chosen so that the mux input labels of the column circuit agree with the
  borrow equation.
* **Number formats.** Scale factors are unsigned. Partial sums are two's
  complement and wrap without saturation.
* **Control and host port.** The partial-sum clear, the host read/write
  port, the `p` register between the comparators and the array, and
  one-cycle crossbar/comparator evaluation are all this design's.
* **Clock gating** is written as register enables.
* **Analog behaviour.** The crossbar count, the `vref` centring and the
  absence of noise are modelling choices.

One point does not reconcile. The macro-level comparison gives the digital
array an average latency of 0.06 ns per crossbar column at 500 MHz
(configuration A), and 0.1 ns for configuration B. In this RTL one input
bit-stream for 128 columns takes 8 cycles, 16 ns in all, or 0.125 ns per
column. A whole 4-bit MVM takes 0.5 ns per column. The A-to-B ratio (about 2x)
matches; the absolute figure does not, and the schedule that would give it
is not described.

Not included:

* the bit-line precharge and sensing circuits, whose effect is folded into
  the logical bit-line model;
* the multi-crossbar accelerator around the macro, with its tiles, buffers
  and cross-crossbar accumulation. A full network needs many macros; for
  example ResNet-20's ~0.27 M 4-bit weights need about 66 crossbars of
  128x128 at one bit per cell. This repository provides one macro.
