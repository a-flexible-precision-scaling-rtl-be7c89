# A bit-serial DNN accelerator that scales weight precision by combining 2- and 3-bit slices

This is synthesizable SystemVerilog for the precision-scalable accelerator described in
"A Flexible Precision Scaling Deep Neural Network Accelerator with Efficient Weight Combination"
(Zhao, Shao, Tian, Cheng, Tsui, Zou). It is an independent implementation written from that
paper. It is not the authors' code.

The accelerator computes matrix-vector products for DNN layers whose weights and activations can
each be anything from 2 to 8 bits wide, and it keeps the hardware busy at low precision.
It rests on two ideas:

* **Activations are bit-serial.** A 64-row array receives one bit of every activation per
  cycle, least significant bit first, so an N-bit activation takes N cycles. Scaling the
  activation precision is therefore free and continuous: fewer bits, fewer cycles.
* **Weights are parallel but sliced.** A processing element (PE) never holds more than 3
  weight bits. A wider weight is cut into 2-bit slices, with a 3-bit top slice when the width
  is odd. Each slice goes to its own column. The column sums are then shifted and added
  together. A 2-bit weight uses one column; an 8-bit weight uses four. Every column does
  useful work at every precision, apart from one column at 6/7 bits.

## 1. The arithmetic

For one output, with weight `W` of M bits split into slices `W_c` (slice `c` carries weight
`4^c`) and activation `A` of N bits streamed as bits `A[t]`:

```
out = sum_c 4^c * sum_t s_t * 2^t * sum_r A_r[t] * W_c,r
      s_t = -1 for the sign bit t = N-1 of a signed activation, +1 otherwise
```

* **One PE** (`mac_cell`) holds a slice in registers REG[2:0] and ANDs all three bits with
  the activation bit. The product is a 3-bit two's-complement number in -4..3.
  In *3-bit mode* the slice is stored as it is, sign bit included.
  In *2-bit mode* only REG[1:0] are loaded. The product MSB is then `S & REG[1]`:
  `S=1` sign-extends a signed 2-bit slice and `S=0` zero-extends an unsigned one.
  Only the top slice of a weight is signed. Every lower slice is an unsigned 2-bit digit.
* **One column** sums its 64 products in an adder tree (`adder_tree`, result -256..192). A
  shift-accumulator (`bs_accumulator`) weights each bit-plane sum by `2^t` and negates the
  sum for the sign bit of signed activations.
* **One group** of four columns combines the four column results with three shifters
  (`shift_adder`). Column 0 holds the most significant slice.

Example: the 5-bit weight `10111` (-9) is stored as `101` in 3-bit mode (-3, weight 4) and
`11` in 2-bit mode with S=0 (+3): -3*4 + 3 = -9.

## 2. Slices, columns and outputs per precision

| weight bits | slices (top first) | columns per weight | results per 64-row word | Shifter #0 | Shifter #1 | Shifter #2 |
|---|---|---|---|---|---|---|
| 8 | 2-2-2-2 | 4 | 16 | 2 | 2 | 4 |
| 7 | 3-2-2 | 3 | 16 + 5 | 0 (column 0 off) | 2 | 4 |
| 6 | 2-2-2 | 3 | 16 + 5 | 0 (column 0 off) | 2 | 4 |
| 5 | 3-2 | 2 | 32 | 2 | 2 | 0 |
| 4 | 2-2 | 2 | 32 | 2 | 2 | 0 |
| 3 | 3 | 1 | 64 | 0 | 0 | 0 |
| 2 | 2 | 1 | 64 | 0 | 0 | 0 |

Inside a group (`shift_adder`, with `rK` the result of column K):

```
sum01 = (r0 << sh0) + r1        sum23 = (r2 << sh1) + r3
total = (sum01 << sh2) + sum23
outputs: 2/3-bit -> r0, r1, r2, r3    4/5-bit -> sum01, sum23    6/7/8-bit -> total
```

Each shifter has only two settings, so the reconfiguration logic stays small.
`prec_config` decodes the weight precision into these settings and into every column's
loading mode and S bit.

### The 6/7-bit case: independent shift-add paths

A 6- or 7-bit weight needs three columns, so column 0 of every group would sit idle. Instead,
column 0 of three consecutive groups (3p, 3p+1, 3p+2) holds one more weight: group 3p takes the
top slice. Activations reach group g+1 one cycle after group g, so these three column results
finish on consecutive cycles. `sa_path` registers the first result, shifts it by 2 and adds
the second one cycle later, then repeats for the third:
`out = ((a0 << 2) + a1) << 2 + a2`. With 16 groups there are five such paths (groups 0..14),
and only column 0 of group 15 stays idle. This raises 6/7-bit throughput from 16 to 21 weights
per word.

## 3. The column adder tree

A 3-bit signed product cannot be fed whole into a carry-save (CSA) tree without sign
extension. The tree therefore splits it. One CSA tree adds the unsigned lower two bits of the
64 products, giving an 8-bit result. A second, independent CSA tree counts the ones among the
64 MSBs, giving 7 bits. The MSB weighs -4, so the count is negated and added to bits [7:2] of
the lower sum. Bits [1:0] pass straight through, and the result is 9 bits signed. When a column
holds an unsigned slice its MSBs are all zero and the second tree does not toggle. That is the
tree's power advantage, which RTL simulation does not measure.

`csa_tree` is a generic 3:2 (Wallace-style) reduction: 64 operands need 10 levels before the
final carry-propagate adder.

## 4. Dataflow and timing

```
input buffer -> act_serializer -> [reg] group 0 -> [reg] group 1 -> ... -> [reg] group 15
                 (bit-planes,        |  4 columns: 64 PEs -> adder tree -> accumulator
                  LSB first)         |  Shifter&Adder -> results
weight buffer -> weight_decomposer -> column shift chains (top to bottom)
```

* **Weight preload.** The controller reads 64 weight-buffer words, the top array row last.
  The decomposer slices each word for the current precision and shifts it down all 64
  column chains at once. After 64 shifts the word read from `w_base + r` sits in row `r`.
  The weights then stay in place (weight-stationary) for any number of input words.
* **Streaming.** The systolic activation register sits at the input of each group. A word
  whose last bit enters group 0's register at cycle T gives:
  * column results at T+2;
  * group g's results at T+3+g;
  * the results of independent path p at T+5+3p.

  The next word's bits follow directly, so the array accepts one word every N cycles for
  N-bit activations. At 2/2 bits this is 64 x 64 x 2 operations per 2 cycles, which is 4.1
  TOPS at 1 GHz and matches the paper's peak figure.
* **Slow shift-add clock.** The paper clocks the Shifter&Adder logic with a second clock
  `clk_SA` at 1/N of the array clock. Here that logic stays on the array clock and is enabled
  once per word by the accumulators' result strobe. The update rate is the same and there is
  only one clock domain.
* **Command timing.** With `load_w` set, `done` rises `64 + N*n_vec + 16 + 7` cycles after
  the cycle in which `start` was sampled. The 64 cycles are the preload. The last 16 + 7
  cycles let the last group and the paths finish.

## 5. Using the top level (`fpsa_top`)

Host-side ports stand in for the off-chip memory:

* **Weight buffer** (`wb_we/wb_waddr/wb_wdata`): 1024 words of 512 bits.
  * A word holds one array row.
  * Byte k is "weight slot" k, and only its low `w_prec` bits are used.
* **Input buffer** (`ib_we/ib_waddr/ib_wdata`): 1024 words of 512 bits.
  * A word holds one input vector.
  * Byte r is the activation of row r, and only its low `a_prec` bits are used.
* **Output buffer** (`ob_re/ob_raddr/ob_rdata`, data one cycle after `ob_re`): 64 entries.
  * Each entry holds 64 slots of 32-bit sign-extended results.
  * Entry `out_base + v` holds the results for input word `v` of the command.
* **Command.** Set `w_prec`, `a_prec`, `w_signed` and `act_signed`, then pulse `start`
  together with `load_w`, `w_base`, `in_base`, `n_vec` and `out_base`. Wait for `done`.
  The configuration must stay stable while `busy` is high.

Weight slot k and output slot k refer to the same output channel. The slot numbering per
precision is:

| weight bits | slots | slot k sits in |
|---|---|---|
| 2, 3 | 0..63 | group k/4, column k%4 |
| 4, 5 | 0..31 | group k/2, columns 2(k%2) and 2(k%2)+1 |
| 8 | 0..15 | group k, columns 0..3 |
| 6, 7 | 0..15 | group k, columns 1..3 |
| 6, 7 | 16..20 | column 0 of groups 3(k-16) .. 3(k-16)+2 (independent paths) |

One command computes `out[v][k] = sum_r W[r][k] * A[v][r]` for 64 input channels (rows).
Layers with more input channels must be split into 64-channel tiles. The partial sums of those
tiles are added outside this design.

## 6. Files

| module | role |
|---|---|
| `fpsa_pkg` | sizes, derived widths, configuration types |
| `mac_cell` | one PE: REG[2:0], mode MUX, S gating, bit-wise AND |
| `csa_tree`, `adder_tree` | column adder tree (two CSA trees, negate, merge) |
| `bs_accumulator` | per-column bit-serial shift-accumulator with sign-bit negation |
| `pe_column` | 64 PEs + adder tree + accumulator |
| `shift_adder` | group Shifter&Adder (Shifters #0-#2) |
| `sa_path` | independent shift-add path for 6/7-bit weights |
| `prec_config` | precision → column modes, S bits, shifter settings |
| `pe_group`, `pe_array` | 4-column group with systolic register; 16-group array with 5 paths and slot routing |
| `weight_decomposer` | slices and routes one row of raw weights to the columns |
| `act_serializer` | parallel word → bit-planes, LSB first |
| `weight_buffer`, `input_buffer`, `output_buffer` | on-chip memories, written as arrays |
| `controller` | preload / stream / drain sequencer and output addressing |
| `fpsa_top` | everything above |

Every module has a testbench `tb/tb_<module>.sv`. Each testbench checks its module against
values computed independently in the testbench: dot products, recombined slices, the table
above, or cycle counts. Each ends by printing `TB_RESULT checks=N failures=M`.
`tb_fpsa_top` runs the whole design at its default size:
* all seven weight precisions;
* signed and unsigned weights and activations;
* weight reuse and back-to-back words;
* the independent paths.

It checks every result slot and the start-to-done cycle count, and it fails if any of these
mechanisms was never exercised. `tb_pe_array` also checks, slot by slot, the cycle on which
each result appears.

`tb_fpsa_workload` also runs at full size. It covers the operating points used for the
efficiency measurements: 8/8, 4/4, 3/3 and 2/2 bits with half of the weights zero, 32 words
each. It measures the sustained rate: 256, 1024, 2730 and 4096 operations per cycle.
It also runs one 6-bit x 4-bit pointwise-convolution tile of 49 words.

To simulate, for example, the full design:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fpsa_pkg.sv tb/tb_fpsa_top.sv \
          --top-module tb_fpsa_top -Mdir obj_top -o sim
./obj_top/sim
```

Building the full-size model takes about two minutes, and the run itself takes well under a
second. The array size is set by the `ROWS` and `GROUPS` parameters of `fpsa_top`. Widths
derive from `ROWS` through the functions in `fpsa_pkg`. Keep `GROUPS` a multiple of 3 plus
one if you want exactly one idle column at 6/7 bits.

## 7. What follows the paper and what does not

Taken from the paper:
* the 64x64 array in 16 groups of 4 columns;
* the 2-bit/3-bit loading modes with the S signal;
* the slice table and the shifter settings;
* column 0 being most significant, which follows from those settings;
* the five independent 6/7-bit paths with one register stage per group;
* the split MSB / lower-2-bit CSA adder tree and its widths (8, 7 and 9 bits for 64 rows);
* negating the sign-bit plane (invert and add one);
* LSB-first activations;
* systolic activation registers between groups;
* top-to-bottom weight preload;
* 144 KB of buffers in total.

Choices made here where the paper gives no detail:
* The split of the 144 KB into 64 KB weight, 64 KB input and 16 KB output buffer, and the word
  formats above.
* The controller, its command interface and its drain time.
* The weight decomposer's slot-to-column mapping.
* The serializer between the input buffer and the array.
* The per-slot banking of the output buffer.
* The `clk_SA` domain, replaced by a clock enable at the same rate (section 4).
* An `act_signed` input that allows unsigned activations, such as post-ReLU values. The paper
  states that all operands are two's complement, which is the case `act_signed = 1`.
* Unsigned weights only at even precisions. An odd-width top slice is always signed, as the
  3-bit mode loads the sign bit directly.
* Accumulator width 17 bits and result width 23 bits, derived from the operand ranges.
* The adder tree is combinational into the accumulator, with no extra pipeline stage.
* Asynchronous active-low reset of all control and data registers.
* The paper's Eq. (1) sums the bit index t from 0 to N. The design uses N bit-planes
  (t = 0..N-1), consistent with the text's "results of the adder tree from N cycles".

Not built:
* Accumulation of partial sums across 64-channel tiles.
* Any DMA to off-chip memory. The host ports replace it.
* Power and clock gating of idle columns and paths. The paper mentions gating, but its
  effect is on power, not function.
