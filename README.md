# A precision-scalable spatial-temporal DNN accelerator with random precision switch

Quantizing a network to a precision picked at random for every inference
makes adversarial examples transfer poorly: an attack crafted at one
precision mostly fails against the same model run at another. To use
this defence cheaply, the hardware must switch precision at run time with
no loss of throughput at any bit width from 1 to 16. Existing
precision-scalable MAC arrays make you choose:

* **Temporal (bit-serial) designs** handle any precision, at one cycle per
  input bit. But their shifters and accumulators are sized for the widest
  precision, and they dominate the area.
* **Spatial designs** build wide multipliers from fused 2-bit bricks. They
  are fast at the few precisions they support (2/4/8/16) and waste
  hardware at every other precision.

This RTL implements the middle road. Bit-serial units of at most 4 x 4
bits are tiled spatially and composed at run time. The partial products
are organised so that almost all of the shift-add logic is shared. A
random precision selector and a small tile sequencer around the array
turn it into a usable accelerator.

All arithmetic is unsigned integer. The RTL is SystemVerilog-2017 and
synthesizable. A self-checking testbench comes with every module.

## 1. The MAC unit: spatial tiling of bit-serial units

One MAC unit (`mac_unit`) holds 16 bit-serial units in 4 groups of 4. In
each cycle a bit-serial unit (`bit_serial_unit`) multiplies one bit of an
input (activation) part by a weight part of up to 4 bits. The input is
the serial operand and the weight the parallel one.

All products that one MAC operation computes belong to the **same
output**, for example taps of different kernel rows, columns and input
channels of one output pixel. Their sum can therefore go into a single
accumulator, whatever the precision.

### Splitting operands

A precision `p` is handled as follows (see `decode_prec` in
`accel_pkg.sv`):

| precision | chunk (k) | part split | pairs / op | cycles / op | example |
|---|---|---|---|---|---|
| 1..4 | p | none | 16 | p | 4x4 bit: 16 products in 4 cycles |
| 5..8 | p | low m = ceil(p/2), high p-m | 4 | m | 8x8 bit: 4 products in 4 cycles; 5 bit = 3+2 |
| 9..16 | ceil(p/2), two chunks | as above, per chunk | 4 | passes x m | 12x12 bit: 4 passes of 6x6 bit |

When only one operand is split, an op takes 8 pairs. For asymmetric
precisions the serial operand sets the cycle count: a 2-bit input with a
4-bit weight takes 2 cycles.

### "First reduce, then shift"

Suppose both operands are split, so `a_i = a_i^H 2^ma + a_i^L` and
`b_i = b_i^H 2^mw + b_i^L`. The unit does not shift each of the four
partial products of each pair. Instead it groups the products by
magnitude:

```
group 0: sum_i a_i^H b_i^H   shifted by ma+mw   (<<2m for equal precisions)
group 1: sum_i a_i^H b_i^L   shifted by ma      (<<m)
group 2: sum_i a_i^L b_i^H   shifted by mw      (<<m)
group 3: sum_i a_i^L b_i^L   shifted by 0       (<<0)
```

The units of a group need no shifters between them. With n = 4 pairs, the
unit needs 4 shifters instead of 4n.

The same allocation logic also serves the other modes:

* **Neither operand split:** all 16 units take whole pairs, and all group
  shifts are 0.
* **One operand split:** pairs 0..3 go to two groups and pairs 4..7 to the
  other two.

### The group shift-add

Every unit of a group sees the same bit position in the same cycle. So
the per-unit accumulators of a classic bit-serial MAC are merged into one
per group (`bsu_group`):

* An adder tree sums the four 4-bit partial products.
* A single accumulator takes the input MSB first:
  `acc <= (acc << 1) + sum`.
* On the first bit of a pass the accumulator restarts, so passes and
  operations follow each other without idle cycles.

### Pipeline of one MAC unit

```
cycle 1..C        bit cycles: units -> group adder trees -> group shift-add
end of cycle C    group results registered            (stage 2)
cycle C+1         group-wise shift-add (<<ma+mw, <<ma, <<mw, <<0),
                  pass shift for >8-bit chunks, add into accumulator (stage 3)
cycle C+2         done pulse, acc valid
```

C is passes x cycles per op. The group shift-add and the group-wise
shift-add sit in separate stages to keep the critical path short. `ready`
is also high during the last bit cycle, so back-to-back ops run at exactly
C cycles each. `clear` makes an op overwrite the accumulator instead of
adding to it. The accumulator is 48 bits.

Above 8 bits each operand is cut into a high and a low chunk of
ceil(p/2) bits. The unit runs once per chunk pair, in the order HH, HL,
LH, LL. Each pass's total is shifted by the chunk weights before it is
accumulated.

## 2. Feeding the array: data buffers and dispatchers

Operands are stored densely packed at a granularity G of 1, 2, 4, 8 or 16
bits. G is the smallest of these that holds the precision, so 3-bit data
is stored in 4-bit fields. A 256-bit buffer word holds 256/(16 G) blocks of
16 operands. Block k of a tile lives at word `base + k div B`, block
`k mod B`, where B is the number of blocks per word. Field i of a block
sits at bit `(block*16 + i)*G`.

The `dispatcher` is a multiplexer over the five unpackings. It selects one
block and zero-extends its 16 fields to 16-bit lanes. Lanes beyond what
the precision mode consumes (8 or 4 pairs) are ignored by the MAC unit.

The `data_buffer` is a 1-read/1-write memory with a one-cycle read. It is
written as a register array and stands for a compiled SRAM macro. There
is one bank per array row for inputs and one per column for weights, each
64 words x 256 bits (2 KB, 32 KB in all).

## 3. The array and the tile sequencer

`mac_array` is an 8 x 8 grid of MAC units:

* Row r receives the input lanes of bank r, and column c the weight lanes
  of bank c.
* Each unit keeps one output: 8 output pixels x 8 output channels per
  tile, output-stationary.
* All units run the same schedule in lock step, which an assertion checks.

`array_ctrl` runs a **tile**, n_ops back-to-back operations that reduce
into the same 64 outputs:

* The first op clears the accumulators, unless `keep` is set at start.
  With `keep` the tile adds onto the previous results, so one reduction
  longer than a tile (see the table below) can run as several tiles
  with the buffers reloaded in between.
* The read for op k+1 is issued in the cycle op k is accepted, so no
  bubble appears even at 1 bit, one op per cycle.
* Start to done takes exactly `n_ops x passes x cycles + 4` cycles. The 4
  cycles are the first buffer read, the two shift-add stages and the
  controller's done state.

Products per output in one tile, with the default 64-word banks:

| precision | blocks/word | pairs/op | products per tile |
|---|---|---|---|
| 1 | 16 | 16 | 16384 |
| 2 | 8 | 16 | 8192 |
| 3-4 | 4 | 16 | 4096 |
| 5-8 | 2 | 4 | 512 |
| 9-16 | 1 | 4 | 256 |

## 4. Random precision switch

`rps_select` draws the inference precision:

* The candidate set is a 16-bit mask, where bit i stands for precision
  i+1. For example `16'h8888` is {4, 8, 12, 16}, `16'h00F8` is 4..8 bits
  and `16'h0008` is a static 4 bits.
* A free-running 16-bit LFSR (x^16+x^14+x^13+x^11) is scaled to an index
  into the set. The pick is ready one cycle after the request, and each
  member is equally likely.
* Changing the mask is the run-time knob between robustness (wide random
  sets) and efficiency (low or static precisions).

The same precision is used for inputs and weights. The host must load
operands quantized at the drawn precision. `use_rps = 1` at tile start
makes the tile use the drawn precision.

## 5. Top level and use (`accel_top`)

1. Optionally pulse `rps_req` with `rps_mask`. When `rps_valid` rises,
   `rps_prec` holds the precision.
2. Write packed words through `ld_a_*` (bank = array row) and `ld_w_*`
   (bank = array column).
3. Pulse `start` with `n_ops`, `a_base`, `w_base`, `keep` and either
   `prec_a`/`prec_w` or `use_rps`.
4. When `done` pulses, `acc[r][c]` holds the sum of products of row r's
   inputs and column c's weights.

Results are raw accumulators. Rescaling, bias and activation belong to
whatever consumes them. Batch-norm parameters per precision fold into
these, so no extra hardware is needed for them.

## 6. Where this RTL departs from or goes beyond the source design

Taken from the source design:

* the 4 x 4-bit bit-serial units
* groups of n = 4
* the split rules (5 = 3+2, 6 = 3+3, 7 = 4+3, 8 = 4+4)
* temporal passes above 8 bits
* the magnitude grouping with <<2m/<<m/<<m/<<0
* the fused group shift-add
* two separate shift-add stages
* a multiplexer dispatcher with 1/2/4/8-bit granularity
* a data buffer feeding a MAC array
* random choice of one precision per inference

Choices made here, because the source is silent:

* unsigned operands
* the input as the serial operand, taken MSB first
* which part is the low part
* lane mapping for mixed split modes
* 16-bit dispatcher mode and packing layout
* 48-bit accumulators
* 8 x 8 array
* 64 x 256-bit banks, one per row/column
* fixed output-stationary mapping
* tile sequencer, including `keep`
* host write ports
* on-chip LFSR selector with mask encoding
* empty mask gives 8 bits

Not provided:

* The source selects the dataflow (loop order and tiling per layer) with
  an offline evolutionary optimizer. That is software, and the mapping
  here is fixed.
* There is no DRAM interface or DMA. Buffers are loaded through plain
  write ports.
* There is no output write-back or requantization.

## 7. Files and simulation

| file | content |
|---|---|
| `rtl/accel_pkg.sv` | types, constants, `decode_prec`, `gran_of` |
| `rtl/bit_serial_unit.sv` | 1-bit x 4-bit partial product |
| `rtl/bsu_group.sv` | 4 units, adder tree, group shift-add |
| `rtl/mac_unit.sv` | split/allocation, groups, group-wise shift-add, passes, accumulator |
| `rtl/dispatcher.sv` | 1/2/4/8/16-bit unpacking multiplexer |
| `rtl/data_buffer.sv` | buffer bank |
| `rtl/mac_array.sv` | ROWS x COLS MAC units |
| `rtl/array_ctrl.sv` | tile sequencer |
| `rtl/rps_select.sv` | random precision selector |
| `rtl/accel_top.sv` | top level |

Each `tb/tb_<module>.sv` checks its module against values computed
independently in the testbench and prints
`TB_RESULT checks=N failures=M`. `tb_accel_top` runs the default 8 x 8
configuration end to end:

* every precision 1..16
* asymmetric pairs
* multi-block words and back-to-back ops
* one reduction split over three tiles with `keep`
* random-precision tiles

It checks all 64 results and the cycle count of every tile. To run one
with Verilator:

```
verilator --binary --timing --assert -Irtl rtl/accel_pkg.sv rtl/*.sv \
    tb/tb_accel_top.sv --top-module tb_accel_top -o sim && ./obj_dir/sim
```
