# A multiplier-less CNN inference core

This core runs the convolution and fully connected layers of a CNN without
a single multiplier. Each weight is stored as a short sum of signed powers
of two. A product `w * x` then becomes two or four shifted copies of `x` or
`-x`, and shifts cost only wiring and small muxes. Dropping the multiplier
makes a multiply-accumulate unit small enough for 2,304 of them, arranged as
a 4 x 4 x 16 array of 3 x 3 elements. At a 250 MHz clock, all of them
working every cycle give 576 GMAC/s with 5-bit weights (460 GMAC/s at
the 200 MHz of the FPGA build). With 8-bit weights
the rate is 288 GMAC/s, because an 8-bit weight needs a second pass.

Two more ideas keep that array busy:

* **Sign-free summation.** The partial products are added without
  sign-extending them. One correction term makes the sum exact.
* **Row reuse.** Input rows flow through the array and come back round to
  be used again. Only a few input lanes need new data from memory.

This is the SystemVerilog of that core. Its arithmetic, array structure and
data paths follow the architecture it was built from. The control, the
interfaces and some details that architecture leaves open are this
design's own. The section "Departures and open points" lists them.

## 1. Weights as powers of two

A weight is written as

    w = s1_1*2^n1_1 + s2_1*2^n2_1  +  s1_2*2^n1_2 + s2_2*2^n2_2

Each sign `s` is in {-1, 0, +1}, coded on 2 bits (`01` = +1, `11` = -1,
`00` = 0). Each exponent `n` is 3 bits, so 0..7. The first pair (k = 1)
is enough for a 5-bit weight. An 8-bit weight also uses the second pair
(k = 2).

`weight_decomp` forms the terms. It computes the non-adjacent form (NAF)
of the weight, a signed-digit form in which no two neighbouring digits are
both non-zero. It then takes the non-zero digits from the most significant
end. The NAF of a value from -128 to 127 never has more than four non-zero
digits, and its largest exponent is 7, so INT8 weights are exact.

For a 5-bit weight, only the first two digits are kept:

| weight | NAF            | two terms | value | error |
|--------|----------------|-----------|-------|-------|
| 11     | 16 - 4 - 1     | 16 - 4    | 12    | 9.1 % |
| 13     | 16 - 4 + 1     | 16 - 4    | 12    | 7.7 % |
| -11    | -16 + 4 + 1    | -16 + 4   | -12   | 9.1 % |
| -13    | -16 + 4 - 1    | -16 + 4   | -12   | 7.7 % |

Every other value from -16 to 15 is exact with two terms. The error set is
the one the source architecture reports. The decomposition sits on the
weight-load path (nine units in `tma_top`, one per weight of a 3 x 3
slice), so the array only ever holds decomposed weights.

## 2. The shift-and-multiply cell (SAM)

A `sam` holds:

* one 8-bit input `X`, and its negation `-X`;
* the eight decomposed-weight fields (4 signs, 4 exponents).

`X` and `-X` move one cell to the right on every input shift (`sh_en`).
`sel_k` picks which weight pair is used. It is 0 for the first pass and 1
for the second pass of an 8-bit weight. For each of the two terms of the
selected pair, a 3:1 mux picks `X`, `-X` or 0 from the term's sign. A
three-stage barrel shifter then shifts the result left by `n`. The two
15-bit outputs are the partial-sum increments (PSIs). Both are 2's-
complement values, but they are passed on as plain 15-bit patterns. The
adder after the cell deals with their signs.

Negation is done once per lane, in `gen_neg`, as the byte enters the
array. It is not repeated in every cell.

## 3. The neural element and its 18-operand adder

A neural element (`ne`) is a 3 x 3 grid of SAMs. Each SAM row is a shift
register of three cells. Inputs enter on the left and leave on the right,
towards the next NE. The nine SAMs produce 18 PSIs, all added by `moa18`
in one cycle.

Sign-extending 18 values is costly, so `moa18` does not do it. It adds the
PSIs as unsigned 15-bit numbers.

**Why the correction works.** A negative PSI `p` read as unsigned is
`p + 2^15`. If `NUM_P` of the 18 PSIs are negative, the unsigned sum is too
large by `NUM_P * 2^15`. That error matters only in bits 15 and up, and the
result is 19 bits wide. So `moa18` adds `(-NUM_P) mod 16` in bits 15..18.
The first operand's columns 15..18 are empty, so the correction travels
there for free.

The 19 operands go through a carry-save tree of full adders (`csa_tree`,
from `csa32` rows) down to two vectors. A carry-lookahead adder
(`cla_adder`) adds those. For 18 words the tree has six full-adder levels.
`NUM_P` itself is a popcount of the PSI sign bits, computed in the `ne`.

`psi_acc` registers the 19-bit sum:

* For a 5-bit weight, it loads the sum on the one pass.
* For an 8-bit weight, it loads the first pass (`sel_k = 0`) and adds the
  second (`sel_k = 1`).

The register is 20 bits, the NE output.

## 4. The array

`ne_array` holds 4 x 4 NE positions. Each position is 16 NEs deep, one per
input channel (`N_CH = 16`). That makes 2,304 SAMs.

**Lanes.** The input arrives on 12 lanes, each carrying one input row and
16 channels wide. NE row `r` takes lanes `3r`, `3r+1` and `3r+2`, one per
SAM row. A lane runs through NE columns 1 to 4 in turn, so it is a shift
register 12 SAMs long. Every lane and channel has its own path:

    lane_src_mux -> lane_fifo (224 bytes) -> gen_neg -> 12 SAMs -> out

**Columns.** The four NEs of one array column share one input window, with
different filters. Per column, `moa66` adds up:

* the 64 NE outputs (4 NE rows x 16 channels), sign-extended to 32 bits;
* a Psum (a partial sum read back from memory);
* a Bias.

That gives four column results, `Psum3x3_1..4`. `psum_tree` then forms:

    Psum6x6_1 = Psum3x3_1 + Psum3x3_2
    Psum6x6_2 = Psum3x3_3 + Psum3x3_4
    Psum12x12 = Psum6x6_1 + Psum6x6_2

The array mode decides which results leave the array: four, two or one.

## 5. Streams, FIFOs and row reuse

This section covers the least obvious part of the design.

**What feedback means.** For vertical stride 1, a lane does not need new
data from memory once its row has gone through the array. The next window
down needs the row one lane below, and that row has just left the
right-hand end of the lane below. So the byte shifted out of the last SAM
of lane `l+1` is pushed into the FIFO of lane `l`. Only the bottom lane of
each group needs a new row from memory. In 3 x 3 mode that is lanes 3, 6, 9
and 12 (counting from 1).

**Vertical stride.** For stride `s`, lane `l` takes its feedback from lane
`l+s` instead. `lane_src_mux` picks between the SRAM data and the outputs
of lanes `l+1` .. `l+4` (`stride_vert = s-1`). The bottom `s` lanes of each
group are fed from memory.

**How a lane stream is laid out.** Each lane carries a sequence of periods
of length `P = W + 12`. One period is one input row of width `W`, followed
by 12 zeros. The 12 zeros are exactly the length of the lane (12 SAMs).

**Why the period is `W + 12`.** When the last real pixel of a row leaves
the lane, the next row's first pixel must already be next in the FIFO.
Take input shift `t`:

* Lane `l` pushes its stream element `W + t - 1`. Its FIFO is kept `W`
  elements ahead of the array.
* A feedback lane pushes the element just leaving lane `l+s`. That is
  stream element `t - 13` of lane `l+s`.
* For the two to be the same element of the next period, the period must
  be `(W + t - 1) - (t - 13) = W + 12`.

The zeros also flush the lane between rows, so no window mixes two rows.

**Starting up.** With `P = W + 12`, a 224-byte FIFO holds one full
224-pixel row. To start:

1. Set every lane to SRAM (`cfg_lane_sram = '1`).
2. Push the first `W` elements of every lane.
3. Switch to the real lane configuration.

After that, each shift pushes one element into each SRAM lane. The
feedback lanes refill themselves.

**Output timing.** After input shift `t`, the SAM at position `p` (from
the left) of NE column `c` holds lane element `t - 1 - 3c - p`. So column
`c` sees the same window three shifts after column `c-1`. A valid
convolution result is one where the whole 3, 6 or 12 wide window lies
inside a row.

Horizontal stride is not built. All positions are computed, and a stride-4
layer keeps one of every four results.

## 6. Filter sizes and fully connected layers

| mode   | window       | lanes per group | results per shift | Psum/Bias added on columns |
|--------|--------------|-----------------|-------------------|----------------------------|
| 3 x 3  | 3 x 3 x 64   | 3               | 4 (Psum3x3_1..4)  | 1, 2, 3, 4                 |
| 6 x 6  | 6 x 6 x 32   | 6               | 2 (Psum6x6_1..2)  | 1, 3                       |
| 12 x 12| 12 x 12 x 16 | 12              | 1 (Psum12x12)     | 1                          |

**3 x 3.** Each array column is a separate 3 x 3 x 64 filter: 4 NE rows
times 16 channels give depth 64. All four filters see the same input.

**6 x 6.** Two 2 x 2 blocks of NEs form one 6 x 6 window of 32 channels.
Columns 1 and 2 are one filter, columns 3 and 4 the other. A 5 x 5 filter
is loaded with zeros in its last row and column.

**12 x 12.** The whole array is one 12 x 12 x 16 window. An 11 x 11 filter
is padded the same way.

Psum and Bias are added on only some columns, so that each result counts
them once. Deeper filters are split into passes. The Psum of the previous
pass is read back and added in.

**Fully connected layers.** Set `cfg_fc` and feed every lane from memory.
The 2,304 SAMs then hold 2,304 weights. After 12 shifts every SAM holds a
fresh input, and `Psum12x12` is a 2,304-term dot product. The controller
reports one result every 12 shifts. Longer vectors are split into
2,304-element chunks, with their sums carried between chunks as Psums.

## 7. Shift controller and throughput

`tma_ctrl` turns `step` requests (accepted while `ready` is high) into
array cycles:

* **INT5.** One `sh_en` per accepted step, one evaluation, so one shift per
  cycle.
* **INT8.** The shift cycle evaluates the first weight pair. The next cycle
  evaluates the second pair (`sel_k = 1`) and accumulates. `ready` is low
  during the second cycle, so the rate is one shift every two cycles.

Two cycles after an INT5 shift, or three after an INT8 shift, the
controller raises `cap`. The core turns it into `psum_req`. In FC mode,
`cap` comes only on every 12th shift.

With 2,304 SAMs each doing one multiply-accumulate per shift, the rate is
2,304 x 250 MHz = 576 GMAC/s for INT5 and 288 GMAC/s for INT8. These
peak figures assume 250 MHz; an FPGA build at 200 MHz reaches 80 % of
them. The
end-to-end test checks the cycle counts behind these rates: 4 shifts in 4
cycles, and 4 shifts in 7 cycles.

## 8. Activation and pooling

`act_pool` turns finished sums into 8-bit activations for the next layer,
in three steps:

1. ReLU.
2. Arithmetic right shift by `cfg_act_shift`, to requantise.
3. Saturation to 127.

It then takes the maximum of `cfg_pool_len` (1..4) consecutive results of
each output. This is one-dimensional max pooling along the output stream.
Two-dimensional pooling windows are not built: they need row buffers and
an addressing scheme that lie outside this core.

## 9. Core interface and protocol (`tma_top`)

The on-chip SRAM and the external DRAM are not part of the RTL. Their side
of every transfer is a port of `tma_top`:

* **Configuration.**
  * `cfg_mode`: 3x3, 6x6 or 12x12.
  * `cfg_int8`, `cfg_fc`.
  * `cfg_lane_sram`: one bit per lane, 1 = SRAM-fed.
  * `cfg_stride_vert`: vertical stride minus 1.
  * `cfg_act_shift`, `cfg_pool_len`.
  * `clear`: restarts the shift count.

  Keep these stable while the array runs.
* **Weights.** With `wl_valid`, the nine raw signed weights `wl_w[row][col]`
  are decomposed and written into NE `wl_ne` (4 x NE row + NE column),
  channel `wl_ch`. This takes one cycle per 3 x 3 slice. An assertion
  checks that no load happens while a shift is in flight.
* **Input data.** `x_push[l]` writes `x_data[l][ch]` into the FIFOs of lane
  `l`. It can come in the same cycle as a step.
* **Shifts.** `step` is taken when `ready` is high.
* **Psum read-back.** `psum_req` (with the shift number in `psum_req_idx`)
  asks for the Psum and Bias of each column. The SRAM side must drive
  `psum_in[4]` and `bias_in[4]` in that same cycle.
* **Results.** One cycle later, `out_valid` presents `out_n` results in
  `psum_out`, tagged with `out_idx`. These are partial sums to store back.
  `act_valid`/`act_out` carry the activated and pooled values.
* `fifo_empty_any` tells the host that some lane has run dry.

## 10. Departures and open points

* **Adder tree depth.** The 18-operand adder uses six full-adder levels.
  The source describes five stages ending with two vectors, which a
  3:2-adder tree cannot reach from 18 words. The sign correction joins the
  first operand rather than the last stage. The arithmetic is the same.
* **`moa18` width.** The adder output is 19 bits (bits 0..18). The source's
  text also calls it 18 bits. The 19-bit reading matches its figure and
  the correction in bits 15..18.
* **Filled-in details.** The source does not give the signed-digit
  algorithm, the sign code, the NE output width (20 bits), the Psum width
  (32 bits), the weight-load port, the handshakes or the reset. Reset is
  asynchronous and active low everywhere.
* **Lane stream layout.** The `W + 12` stream layout and the preload
  procedure are this design's. So is the choice of which lane's output
  feeds which FIFO, beyond what row reuse requires.
* **Not built:**
  * horizontal stride (the source does not build it either);
  * the schedule that accumulates the 11 x 11 Conv1 filter over four
    shifts;
  * two-dimensional pooling;
  * the SRAM, the DRAM and their address generators.

## 11. Verification

Every module has a self-checking testbench in `tb/`. Each compares against
a reference written independently of the RTL and ends with a line
`TB_RESULT checks=N failures=M`. Each has a watchdog.

The end-to-end harness (`tb/tma_top_harness.sv`) checks every result
against a direct convolution of the input images with the raw weights,
using the effective INT5 values where they apply. It runs:

* 3 x 3 INT5, with the activation and pooling outputs;
* 3 x 3 INT8 with vertical stride 2 and random stalls;
* 6 x 6 INT5;
* 12 x 12 INT8;
* one FC pass;
* the rate checks.

It counts each mechanism it exercises and fails if one never happened:
INT5 rounding, INT8 second pass, feedback shifts, stride 2, each mode, FC
results, stalls, Psum/Bias, activations.

There are two harness instances:

* `tb/tma_top_tb.sv`: a small instance (2 channels, 8-byte FIFOs, 8-pixel
  rows).
* `tb/tma_top_full_tb.sv`: the core at its default size (16 channels,
  224-byte FIFOs), with 224-pixel rows. It runs 10,887 checks in under a
  second of simulation after a build of about a minute.

To simulate with Verilator, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -y rtl -y tb \
        --top-module tma_top_full_tb rtl/tma_pkg.sv tb/tma_top_full_tb.sv
    ./obj_dir/Vtma_top_full_tb

Any other testbench (`ne_tb`, `moa18_tb`, ...) works the same way.

## 12. Files

| file | contents |
|------|----------|
| `rtl/tma_pkg.sv` | widths, decomposed-weight struct, sign code, modes |
| `rtl/weight_decomp.sv` | weight to signed powers of two |
| `rtl/sam.sv` | shift-and-multiply cell |
| `rtl/csa32.sv`, `rtl/csa_tree.sv`, `rtl/cla_adder.sv` | carry-save tree and final adder |
| `rtl/moa18.sv` | 18-PSI adder with sign correction |
| `rtl/psi_acc.sv` | INT8 two-pass accumulation |
| `rtl/ne.sv` | neural element (3 x 3 SAMs) |
| `rtl/gen_neg.sv` | lane negation |
| `rtl/lane_fifo.sv` | 224-byte lane FIFO |
| `rtl/lane_src_mux.sv` | SRAM / feedback / stride selection |
| `rtl/moa66.sv` | column adder, 64 NEs + Psum + Bias |
| `rtl/psum_tree.sv` | 6 x 6 and 12 x 12 combination |
| `rtl/ne_array.sv` | the 4 x 4 x 16 array with its lanes |
| `rtl/tma_ctrl.sv` | shift / pass / capture controller |
| `rtl/act_pool.sv` | ReLU, requantisation, max pooling |
| `rtl/tma_top.sv` | the core |
