# A multiply-accumulate compressor for MHz-frame-rate pixel detectors

A charge-integrating X-ray or electron pixel detector reading 192 x 168 pixels
of 12 bits at one million frames per second produces about 387 Gbit/s, more
than a chip can send off. This design compresses every frame on chip to a
fixed number of values: it flattens the frame into a vector of 32,256 pixels
and multiplies that vector by a pre-computed encoding matrix of K columns
(for example the first K principal components of earlier, similar data). Each
frame leaves the chip as K numbers, always K, however the frame looks. The
output size is fixed, so no packing stage and no FIFO are needed before the
serial links.

The RTL here implements the compressor in its main configuration:

| quantity | value |
|---|---|
| pixel array | 192 columns x 168 rows, 12-bit unsigned pixels |
| frame rate | 1 MHz, one row every 5.95 ns (168 MHz row rate) |
| components K | 192 |
| weights | FP12: sign, 5-bit exponent, 6-bit mantissa |
| products, adder trees | FP16: sign, 5-bit exponent, 10-bit mantissa |
| accumulators, lane adder | FP17: sign, 6-bit exponent, 10-bit mantissa |
| core clock | 672 MHz (4x the row rate) |
| partitioning | 16 identical blocks of 12 columns |
| logic sharing | 4-way: each block handles 3 columns per clock |
| weight memory | 768 SRAMs of 672 words x 144 bits (74.3 Mbit) |
| output | 192 FP17 words per frame (3.26 Gbit/s) |

The compressor is one module, `compressor_top`, with plain-signal ports. The
analog pixel matrix that drives its row inputs and the serializers that send
its results are not part of the RTL.

## Dataflow

```
 row[192] + dv/sof ──► addr_fsm ──► read address, phase, first/last tags ──┐
                                                                          │ (to all blocks)
 cfg_sdi/sen/sync ──► sram_config ──► write bus (select, address, data) ──┤
                                                                          ▼
   compressor_block 0 (columns 0..11)     ...   compressor_block 15 (columns 180..191)
   ┌──────────────────────────────────────────────────────────────────────────┐
   │ share_mux: row register, picks 3 of the 12 columns per clock (phase 0..3)│
   │ 48 x weight_sram (672 x 144): 12 FP12 weights per word                   │
   │ 192 x mult_bank (3 x fp_mult + register)                                 │
   │ 192 x accumulator (2-level adder_tree, FP16→FP17, accumulation register) │
   └──────────────────────────────────────────────────────────────────────────┘
                  │ 16 blocks x 192 FP17 partial sums, once per frame
                  ▼
   lane_adder: per component, 4 pipelined levels of FP17 adders (16 → 1)
                  │
                  ▼
   res[192] (FP17), res_valid  ──► serializers (outside)
```

Result k of a frame is the sum, over all 32,256 pixels p, of
`pixel[p] * W[p][k]`. Pixel index p is `row*192 + column`.

## Time-multiplexing: four passes per row

Rows arrive at 168 MHz. The datapath runs at 672 MHz, so each row gets four
clock cycles, called phases 0 to 3. In phase g each block feeds columns
`3g, 3g+1, 3g+2` of its 12-column slice to its multipliers. This cuts the
multipliers and adders to a quarter. The memory stays the same size, but it
is read four times per row and is therefore four times deeper and a quarter
as many macros. One frame takes 168 x 4 = 672 cycles, which is exactly 1 µs.

`addr_fsm` accepts a row (dv) only when the previous row has issued all its
phases, so dv may come at most once every 4 cycles. Rows may arrive with
gaps; the pipeline only does work on valid cycles.

Timing of one row (cycle 0 = the cycle dv is high):

| cycle | what happens |
|---|---|
| 0 | `addr_fsm` accepts the row (`load`); every `share_mux` captures its slice |
| 1..4 | `addr_fsm` issues phases 0..3: SRAM address `row*4 + phase`; the mux selects group `phase` and registers it |
| 2..5 | SRAM data and the pixel group meet at the multipliers |
| 3..6 | products are registered; the adder tree starts |
| 5..8 | the tree's partial sums reach the accumulation register |

For the frame's last row, a block's `res_valid` rises 9 cycles after dv.
The lane adder adds 4 more cycles. `res_valid` at the top therefore pulses
13 cycles after the last dv of a frame, and once every 672 cycles when
frames follow each other. `res` holds its value until the next frame's
results arrive.

## Weight memory layout

Every cycle a block needs 192 components x 3 columns = 576 weights. The 48
SRAMs of a block deliver 12 weights each. In this design SRAM s of a block
serves components `4s .. 4s+3`. Word `row*4 + g` of SRAM s holds, in 12-bit
lane `j*3 + i` (lane 0 in the least significant bits), the weight for
component `4s + j` and slice column `3g + i`. Hence:

```
block  b = column / 12           SRAM s    = k / 4
phase  g = (column % 12) / 3     address   = row*4 + g
i        = column % 3            lane      = (k % 4)*3 + i
```

The paper fixes only the sizes (48 SRAMs of 672 x 144 per block, 4.64 Mbit).
The lane and address layout is this design's choice. Software that builds
the configuration stream must use the same layout.

## Loading the weights

`sram_config` turns a one-bit stream into SRAM writes. Each bit arrives with
`cfg_sen` high. Each group of 164 bits forms one packet, sent most significant
bit first:

```
[ SRAM select: 10 bits | word address: 10 bits | data: 144 bits ]
```

The SRAM select is `block*48 + s`. When a packet is complete, the write is
broadcast to all SRAMs and only the selected one stores it. A one-cycle
`cfg_sync` pulse clears the bit counter, so the sender can realign after an
error. Loading all 74.3 Mbit this way takes about 85 million bits; a single
word can be rewritten between frames. Writes are meant to happen while no
frame is running. A write in the same cycle as a read takes the SRAM port,
and that read is lost.

## Number formats and arithmetic

All three formats are sign / exponent / mantissa with a hidden leading one.
An exponent field of 0 means zero. There are no subnormals, infinities or
NaNs.

* **FP12 weights**: bias 31, so every exponent is at most 0. PCA weights are
  bounded by 1 in magnitude, and this bias uses the exponent bits for small
  values. The largest magnitude is just below 2 and the smallest is 2^-30.
* **FP16 products**: IEEE half layout, bias 15. The largest product,
  4095 x 1.98, fits easily.
* **FP17 sums**: the exponent is one bit wider (bias 31). A frame sum can
  reach about 4095 x 12 x 168 per block, and more after the lane adder. That
  is far beyond the FP16 maximum of 65504, but well inside FP17's 2^32.

**Multiplier (`fp_mult`).** Because one operand is an integer, the
multiplier is an integer product of the pixel and the 7-bit weight
significand. It then finds the leading one of the 19-bit product, shifts
the product to normalise it, and rounds to 10 mantissa bits to nearest
even. The exponent is the leading-one position plus the weight exponent,
re-biased. The sign is the weight's sign. A product below 2^-14 is flushed
to zero.

**Adder (`fp_add`).** The adder picks the operand of larger magnitude and
shifts the other one right by the exponent difference. Three extra bits
(guard, round, sticky) keep the rounding exact. It adds or subtracts the
significands and renormalises on the leading one. It then rounds to nearest
even, and the result takes the sign of the larger operand. Exact
cancellation gives +0. Overflow saturates to the largest value, and
underflow flushes to zero. The same module is used with E=5 in the adder
trees and with E=6 for accumulation and lane reduction.

**Order of operations.** Floating-point addition is not associative, so the
exact output bits depend on the order of the additions:

1. Per block, component and phase: `(p0 + p1) + p2` in FP16.
2. The partial sum is widened exactly to FP17. On the first phase of a
   frame it is loaded into the accumulation register; after that it is added
   to the register in row-major order (row, then phase).
3. The 16 block results are added pairwise in four levels:
   `((b0+b1)+(b2+b3)) + ...`, in FP17.

The testbenches' reference model follows the same order. Its results are
bit-exact, not within a tolerance.

## Synchronisation errors

`sof` marks the dv of the first row of a frame. `addr_fsm` raises one-cycle
error pulses:

* `data_err`: a dv arrived while the previous row still had phases to
  issue. The new row is dropped.
* `frame_err`: either `sof` came before the current frame's last row, or a
  row without `sof` came where a frame must begin. In the first case the
  partial frame is abandoned and a new frame starts at row 0; its results are
  never output. In the second case the row is dropped.

## Modules

| file | role |
|---|---|
| `rtl/mac_pkg.sv` | format widths, biases, default sizes, FP16→FP17 widening |
| `rtl/fp_mult.sv` | integer x FP12 → FP16 multiplier, combinational |
| `rtl/fp_add.sv` | parameterised FP adder, combinational |
| `rtl/adder_tree.sv` | pipelined N-input reduction, one register per level |
| `rtl/accumulator.sv` | adder tree + FP17 accumulation register with frame tags |
| `rtl/mult_bank.sv` | N multipliers of one component + pipeline register |
| `rtl/weight_sram.sv` | 672 x 144 single-port memory with a registered read; a stand-in for the SRAM macro |
| `rtl/share_mux.sv` | row register and column-group multiplexer for logic sharing |
| `rtl/addr_fsm.sv` | row/phase sequencer, SRAM read address, frame tags, error flags |
| `rtl/sram_config.sv` | serial configuration deserialiser and write bus |
| `rtl/compressor_block.sv` | one 12-column partition: mux, 48 SRAMs, 192 banks, 192 accumulators |
| `rtl/lane_adder.sv` | 16 → 1 reduction of the block results per component |
| `rtl/compressor_top.sv` | the whole compressor |

`compressor_top` parameters: `COLS`, `ROWS`, `PIX_W`, `K`, `NB` (blocks),
`SHARE` (logic-sharing factor) and `SRAM_W`. The derived sizes must divide
evenly: `COLS` by `NB`, the block width by `SHARE`, the SRAM word by
`12 x COLS/NB/SHARE`, and `K` by the number of components per SRAM. The
number formats are constants in `mac_pkg`.

`weight_sram` is a register array. In silicon it would be replaced by the
process's 672 x 144 SRAM macro, with the same one-cycle read.

## Simulating

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. The reference model is in
`tb/fp_ref_pkg.sv`: it does the arithmetic on `real` numbers, and then
rounds to each format with a separate rounding routine. It shares no code
with the RTL.

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_compressor_top \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/mac_pkg.sv tb/fp_ref_pkg.sv \
    tb/tb_compressor_top.sv
obj_dir/Vtb_compressor_top
```

* `tb_compressor_top` is a reduced compressor: 8 columns in 2 blocks, 2-way
  sharing, 3-row frames, K = 4. It loads all weights through the serial
  port. It then runs frames back to back and with gaps, both kinds of frame
  error, a data error, a partial reconfiguration, and a frame whose sums
  exceed the FP16 range. It counts each of these events.
* No testbench runs the compressor at its default size (192 x 168 pixels,
  K = 192, 768 SRAMs). The default size passes Verilator lint and yosys
  elaboration, but a Verilator simulation build of it did not finish
  compiling in reasonable time. The largest simulated configurations are
  the reduced compressor above and `tb_compressor_block` (4 columns, K = 4,
  2-way sharing, 3 rows). The arithmetic units are tested at their full
  formats (FP12 x 12-bit -> FP16, FP16 and FP17 adders). The default-size
  latency (13 cycles from the last row to the results) and the 672-cycle
  frame period follow from the same parameterised equations that the
  reduced benches check.

## Where this design departs from, or adds to, the paper

The paper gives the architecture, the formats, the sizes, and how the
multiplier and adder work. The following are this design's own choices:

* The weight-SRAM word layout and the column grouping for sharing
  (contiguous groups of 3).
* The configuration packet format, with `cfg_sen` and `cfg_sync`.
* A start-of-frame input `sof`, and the exact error cases with their
  one-cycle pulses. The paper says only that the address FSM flags data and
  frame synchronisation errors.
* A single clock. The 168 MHz row rate appears as a dv pulse every 4 cycles
  of the 672 MHz clock, instead of a second phase-locked clock.
* Frame handling in the accumulator. The first partial sum of a frame loads
  the register and the last one moves the total to an output register, so
  frames need no idle cycle between them.
* The accumulation adder is drawn as part of the last tree level in one
  figure of the paper and as a separate loop around the register in another.
  Here it is a separate FP17 adder after a pure FP16 tree.
* Weight exponent field 0 means zero. The paper also quotes a lowest weight
  exponent of -31, which would need field 0 as a number. Here the smallest
  weight is 2^-30.
* Flush-to-zero on underflow, saturation on overflow (neither is reachable
  with 12-bit pixels and weights below 2, except underflow of very small
  weights), and +0 on exact cancellation.
* Products and tree sums use constant FP16 widths at every tree level. This
  matches the paper's optimised design, which widens only the last
  (accumulation) adder.

Not included: the analog pixel matrix, the serializers, and the bias-add and
ReLU stage that the paper mentions only as a possible extension.
