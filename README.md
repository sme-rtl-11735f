# SME bank: bit-sliced ReRAM vector-matrix multiplication with squeeze-out

A ReRAM crossbar computes a vector-matrix product in one analog step: inputs
drive the rows, every cell adds a current proportional to input x conductance
onto its column, and the column current is the dot product. The price is
rigidity. Cells that share a row share an input and cells that share a column
share an adder, so a cell that holds a zero cannot simply be removed. With
8-bit weights stored one bit per single-level cell, most cells hold zeros and
still occupy crossbar area.

SME (Sparse-Multiplication-Engine, Liu et al.) gets around this with three
offline steps and a small amount of extra hardware:

1. **Restricted quantisation.** A weight is an 8-bit codeword
   `w = sum_i b_i * 2^-i` (i = 1 is the most significant bit), and all of its
   '1' bits lie inside a window of at most S consecutive positions
   (S = 3 is the preferred setting). High bits are then almost always zero.
2. **Inter-crossbar bit slicing.** Bit i of every weight of a 128x128 block
   goes to crossbar i of a group of 8 crossbars. Zeros of the same bit
   position now pile up in the same crossbar, and crossbars that end up empty
   are not used at all.
3. **Squeeze-out.** The MSB crossbars are sparse but rarely completely empty.
   For the few rows that hold a '1' in the top x bit positions, the whole row
   is moved x crossbars towards the LSB end (the x lowest bits fall off; with
   the window restriction they are zero for those weights). That row's
   weights are now 2^x times smaller, so its input is multiplied by 2^x. After
   this the top x crossbars are empty and are released.

The hardware side is what this RTL implements: one **bank** with a
controller, 8 **in-situ computation units (CUs)**, an activation buffer, a
**buffer connection** that applies the squeeze-out to the inputs, and shared
activation and pooling units.

## A worked example

Take 4-bit weights for brevity and a squeeze by x = 1. Row 1 holds the weight
`1010` = 10/16. Its bits sit in crossbars XB1..XB4 as 1, 0, 1, 0. XB1 has a '1'
only in row 1, so row 1 is squeezed: XB2..XB4 now hold 1, 0, 1 for that row,
i.e. the weight `0101` = 5/16, and XB1 is empty. The input of row 1 is doubled,
`I * 10 = (2I) * 5`, and the product is unchanged. The doubling costs one extra
input cycle (below), one crossbar is saved and the work falls from 4 bit
crossbars x 4 input cycles to 3 x 5.

## Bank organisation

```
             host: instructions, buffer port, weight programming
                                   |
  +--------------------------------v--------------------------------------+
  | sme_controller ----- control to everything below ----------------      |
  |                                                                        |
  | sme_edram_buffer (16 KB, 128 words x 1024 bit)                         |
  |      | one input vector (128 x 8 bit)          ^ 8 result words        |
  |      v                                         |                       |
  |  sme_connection x8  (RCMR + shifter, per CU)   |                       |
  |      | 128 x (8+3) bit                         |                       |
  |      v                                         |                       |
  |  sme_cu x8 ------------------------------> sme_activation -> sme_pooling|
  |   sme_input_reg  -> 8 x { reram_crossbar -> xb_adc }                   |
  |   -> sme_shift_accumulator (>>1 .. >>8, accumulator)                   |
  |   -> sme_shift_adder (shift & add, output register 128 x 32 bit)       |
  +------------------------------------------------------------------------+
```

Default sizes: 128x128 crossbars, 8 crossbars per CU (one per weight bit),
8 CUs per bank, 8-bit activations, 16 KB of buffer per bank, squeeze-out
depth up to 3 bits. A bank therefore holds 8 blocks of 128x128 8-bit weights
(131,072 weights) and one instruction multiplies a 128-element input vector
by a 128x1024 weight matrix.

All 8 CUs receive the same input vector and hold different output columns.
Each CU has its own connection because each CU's crossbar group has its own
set of squeezed rows.

## How one vector-matrix product runs

Inputs are fed bit-serially, one bit of every row per *input cycle*, least
significant bit first. A crossbar row therefore sees only 0 or 1, and every
bitline value is simply the number of rows whose input bit and stored bit are
both 1 (0..128).

For each input cycle t (t = 0 .. 8+x-1) the controller spends 129 clocks:

| clock | what happens |
|---|---|
| 1 | **S&H latch**: each enabled crossbar evaluates its 128 bitlines for the current input bits and holds them |
| 2..129 | **sampling**: column c = 0..127; the 8 ADCs of the CU convert column c of their crossbars in parallel |

Each sample then flows through a two-stage pipeline:

1. The ADC code of crossbar i is registered.
2. It is scaled by 2^-i (the `>>i` shifter), the 8 scaled codes are added
   (accumulator), and the sum, shifted left by t, is added into entry c of
   the output register (shift-and-add).

Fractions are kept as integers: `>>i` is carried out as a left shift by 8-i,
so the output register ends up holding `sum_r in[r] * W[r][c]` with the
integer weight `W = sum_i b_i * 2^(8-i)`.

On the last sample of a cycle the input register shifts to the next bit.
The input may change while the ADCs read out, because the S&H holds the
bitline values.

Squeeze-out needs no change to the output side. A squeezed row's input
leaves the connection shifted left by x. Bits are sent LSB first, so its bits
reach the crossbars x cycles later. That delay multiplies the row's
contribution by 2^x, which is exactly the correction the squeezed weights
need. The price is x extra input cycles per vector. When Shift_EN is off for
a layer, the controller runs 8 input cycles.

Complete OP_VMM timing, from the clock that accepts the instruction to the
`done` pulse:

    2 (buffer read, input load) + (8+x) * 129 + 2 (pipeline drain) + 2 * 8 (write-back)

This comes to 1052 clocks without squeeze-out and 1439 clocks with x = 3.
The testbenches check both numbers.

Write-back handles one CU per two clocks:

1. Read the destination word (it holds the old value, used for pooling).
2. Apply the activation to that CU's 128 sums: `min(sum >> act_shift, 255)`.
3. With pooling on, keep the lane-wise maximum of the new and the old value.
4. Write the word back.

## Crossbar index and released crossbars

Bit slicing and squeeze-out leave whole crossbars empty. The controller keeps
one enable bit per crossbar, `xb_en` (bit `8*cu + i-1` is crossbar i of CU
cu). A crossbar with its bit cleared is never latched or sampled, and its
shifter output is forced to zero. The crossbar array itself stays physically
present. The area saving that SME counts comes from not building or not
assigning those crossbars. That saving happens at mapping time and is not a
runtime feature.

## Programming model

Instructions (`sme_pkg::instr_t`) are accepted on `instr_valid && instr_ready`:

| opcode | fields used | effect | clocks |
|---|---|---|---|
| `OP_CFG`  | `sq_bits` (x), `shift_en`, `act_shift`, `pool_en`, `xb_en` | sets the layer configuration | 1 |
| `OP_RCMR` | `src` | buffer word `src` is split into 8 slices of 128 bits; slice cu becomes CU cu's row mask (RCMR) | 2 |
| `OP_VMM`  | `src`, `dst` | input vector from word `src`; results of CU cu go to word `dst+cu` | see above |

Buffer words are 1024 bits. Element r of a vector occupies bits `[8r+7:8r]`,
and the RCMR mask of CU cu occupies bits `[128cu+127:128cu]`.

Weights are written with the programming port, one crossbar row per clock.
The port takes `prog_cu`, `prog_xb` (0 = the MSB crossbar), `prog_row` and
the 128 bits of that row. The host reaches the buffer through `host_*`, but
only while `busy` is low; an assertion enforces this.

Pooling is max pooling spread over several instructions. To pool a window of
k positions, run k `OP_VMM`s to the same `dst`: the first with `pool_en` = 0,
the rest with `pool_en` = 1.

A layer typically runs like this:

1. Program the 64 crossbars with the offline SME mapping.
2. Write the RCMR word and the input vectors into the buffer.
3. Issue `OP_RCMR`, then `OP_CFG`.
4. Issue one `OP_VMM` per input vector.

## What is modelled and what is synthesizable

* `reram_crossbar` and `xb_adc` are behavioural models of analog parts. Each
  file says so in its first comment.
  * `reram_crossbar` models the cell array, the bitline and wordline
    drivers, and the sample-and-hold. It treats cells as ideal 0/1
    conductances and represents a bitline current by the count it is
    proportional to.
  * `xb_adc` models the analog multiplexer and the ADC. It is ideal with 8
    bits, which is exact for counts of 0..128, and clips above full scale.
  * The 1-bit DACs are not modelled: the input bit drives the row directly.
* Everything else is synthesizable RTL: controller, connection, input
  register, shifters and accumulator, shift-adder, buffer (a plain memory
  array in place of eDRAM), activation, pooling and the bank.
* Because the crossbar model keeps every cell as a flip-flop, a full bank
  contains 1 Mbit of cell state plus 8192 bitline counters. Logic synthesis of
  the whole bank is correspondingly heavy; for a real implementation, replace
  the two models with the analog macros.

## Departures from the source description and own choices

The source describes the CU data path and the buffer connection in some
detail. It describes the controller only by its function, and it only names
the activation unit, the pooling unit and the shared bus. The following are
this design's choices:

* **Unsigned weights and inputs.** The squeeze-out and bit-slice mechanisms
  are described for non-negative codewords, and nothing says how weight signs
  are handled. Signed weights (for example a second crossbar group for
  negative weights, subtracted after the ADC) are not built.
* **Instruction set, buffer word format, host ports and weight programming**
  are all this design's own. The source gives no instruction encoding or bus
  protocol, and only names a shared bus inside the bank. Here the blocks are
  wired point to point.
* **Clock-level schedule:** one latch clock plus 128 sample clocks per input
  cycle, LSB-first bit order, and a 2-stage sample pipeline. The source gives
  128 samplings per cycle and 8 crossbars sampled in parallel, but no clock
  rates.
* **Activation unit:** a right shift and saturation to 8 bits. With unsigned
  data a ReLU would do nothing, so the unit acts as a clamped linear
  activation whose shift also undoes the fixed-point scaling.
* **Pooling unit:** max pooling as a read-modify-write of the destination
  word.
* **One connection/RCMR per CU.** The drawing shows one connection band for
  the whole bank. Squeezed rows differ between crossbar groups, however, so
  each CU gets its own mask.
* **Connection output width:** 8+x bits, held in an 8+3-bit field. The
  drawing of the connection labels its output width "BW-b", which does not
  match the (8+x)-bit extension described in the text; the text is followed.
* **Widths:** 8-bit ADC, 32-bit output register, 1024-bit buffer word,
  single-clock buffer read latency.
* **Scope:** a single bank. The multi-bank chip (20 MB of ReRAM in the
  evaluated configuration), its IO bus, eDRAM refresh and all analog
  non-idealities are outside this RTL.
* **MLC cells:** the source discusses multi-level cells as an alternative.
  Only single-level cells are built.

## Capacity against the evaluated networks

One bank holds 131,072 weights and 16 KB of activations. The parameter counts
below are general knowledge, not part of the source: ResNet-18 has about
11.7 M weights, ResNet-50 about 25.6 M and MobileNet-v2 about 3.5 M. A whole
network therefore needs the multi-bank chip, or a layer has to be processed
one 128x1024 tile at a time with reprogramming in between.

Everything else that was evaluated fits the bank:

* squeeze-out by 1, 2 or 3 bits;
* a '1' window S of 2, 3 or 4, which matters only to the offline
  quantisation;
* mixed precision of 5 to 8 bits, where unused bit crossbars are released.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The end-to-end test,
`tb_sme_bank`, runs the bank at its full default size:

1. It produces weights with the S = 3 window, slices them and squeezes the
   rows with high bits set by x = 3.
2. It programs all 64 crossbars and loads the vectors and the RCMR word.
3. It runs:
   * a squeezed layer with crossbars 1..3 released, two vectors max-pooled
     into one destination;
   * a layer with squeeze-out switched off.
4. It compares every result with a reference. For the squeezed layer the
   reference is computed from the original, unsqueezed weights, which shows
   that squeeze-out leaves the products unchanged.
5. It checks the instruction latencies.
6. It requires each mechanism to occur at least once: squeezed rows, released
   crossbars, activation saturation, pooling keeping the stored value, and
   the mode switch.

A second full-size test, `tb_sme_workloads`, sweeps the mapping
configurations over which SME is evaluated. It runs them one after another on
the same bank:

* squeeze-out by 1, 2 and 3 bits with S = 3;
* squeeze-out by 2 bits with S = 4;
* 5-bit weights (mixed precision) with S = 2 and squeeze-out off.

For each configuration it derives the crossbar index from the mapped weights
and programs all 64 crossbars. It then checks every output at full precision,
with the activation shift chosen so that nothing saturates. Depending on the
configuration, between 8 and 24 of the 64 crossbars are released.

Run any testbench with Verilator 5 from the directory holding `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sme_pkg.sv tb/tb_sme_bank.sv \
          --top-module tb_sme_bank -o sim && ./obj_dir/sim
```

Replace `tb_sme_bank` with any other testbench name to run that test. The
full-size bank test builds in about half a minute and runs in well under a
second; the workload sweep builds in under two minutes.

## Files

| file | contents |
|---|---|
| `rtl/sme_pkg.sv` | sizes, instruction format, CU control bundle |
| `rtl/sme_bank.sv` | top: one bank |
| `rtl/sme_controller.sv` | instruction decoder and sequencing FSM |
| `rtl/sme_connection.sv` | RCMR and input shifter (squeeze-out on the input side) |
| `rtl/sme_input_reg.sv` | bit-serial input register |
| `rtl/sme_cu.sv` | in-situ computation unit |
| `rtl/reram_crossbar.sv` | behavioural model: crossbar, drivers, S&H |
| `rtl/xb_adc.sv` | behavioural model: analog MUX and ADC |
| `rtl/sme_shift_accumulator.sv` | per-crossbar shifters and accumulator |
| `rtl/sme_shift_adder.sv` | shift-and-add and output register |
| `rtl/sme_edram_buffer.sv` | activation buffer |
| `rtl/sme_activation.sv`, `rtl/sme_pooling.sv` | shared activation and pooling units |
| `tb/tb_*.sv` | one self-checking testbench per module |
