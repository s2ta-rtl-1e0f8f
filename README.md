# S2TA-AW: a systolic array for structured-sparse INT8 CNNs

This accelerator speeds up quantized CNN inference by skipping zeros in a way
that keeps the hardware simple. Both weights and activations are cut into
**density-bound blocks** (DBB): groups of 8 consecutive channels with a fixed
upper limit on the number of non-zeros (NNZ). Because that limit is known, no
operand FIFOs or scatter accumulators are needed. A block travels as its
non-zero values plus an 8-bit position mask.

* **Weights** use a fixed 4/8 DBB. At most 4 of the 8 weights in a block are
  non-zero, so a weight block is 4 INT8 values and an 8-bit mask. Pruning
  happens at training time.
* **Activations** use a variable A-DBB density, chosen per layer from 1/8 to
  8/8. Activations only exist at run time, so the **DAP** (dynamic activation
  pruning) unit keeps the NNZ largest-magnitude elements of each block in
  hardware.
* The datapath is **time unrolled**. A MAC takes one activation element per
  cycle. A layer at NNZ/8 therefore spends NNZ cycles per channel block, so a
  sparser layer runs proportionally faster on the same hardware.

The default configuration is written 8x4x4_8x8: an 8 x 8 array of tensor PEs
(TPEs), each with A = 8, B = 4 and C = 4. That is 2048 INT8 MACs, fed from a
512 KB weight buffer and a 2 MB activation buffer.

## The time-unrolled MAC (`dp1m4`)

Each MAC receives, every cycle:

* one activation element: its INT8 value, its position `p` (0..7) in the
  block, and a valid bit;
* the weight block that element must meet: 4 values and a mask.

A 4:1 mux selects the weight stored at position `p`. Its select is the number
of mask bits set below `p`. If `mask[p]` is 0, the weight is zero. The product
is added to an INT32 accumulator. Clock gating on zero values disables the
accumulator when the activation is zero or invalid, or when the selected
weight is zero or absent. This captures sparsity beyond what the DBB bound
exploits.

Mask convention: bit `i` is element `i` of the raw block, and element 0 is the
LSB. Kept values are stored in ascending position order. Example: the raw
block 6, 2, -7, 5, 1, -1, 4, 0 (elements 0..7) pruned to 4/8 has mask `8'h4D`
and values 6, -7, 5, 4.

## Tensor PE and array (`tpe`, `tpe_array`)

A TPE has A x C MACs arranged as an outer product:

* each cycle it registers A activation elements, one from each of A different
  activation blocks (output rows);
* it also registers C weight blocks (output channels);
* MAC (a, c) accumulates output row `a`, output channel `c`.

The registered operands are passed on: activations go right, weights go down.
Per 32 MACs the TPE holds only 8 activation bytes and 16 weight bytes, which
is where the efficiency comes from.

The array is output-stationary. Several things make the dataflow work:

* **Input skew.** `tpe_array` delays row `i` by `i` cycles and column `j` by
  `j` cycles, so the caller drives unskewed inputs.
* **Weight holding.** A column's weight block stays constant for the NA cycles
  of a block period (NA is the layer's activation NNZ). The activation
  elements of that channel block stream past it during those cycles.
* **Skew and holding together.** Each TPE sees the sequence one cycle later
  than its neighbour. Every activation element therefore meets exactly the
  weight block of its own channel block.
* **Wavefront timing.** An element given to row `i` in cycle `t` is
  multiplied in TPE (i, j) in cycle `t+i+j+1`.
* **Drain.** The accumulators of an array row form one shift chain of N*A
  entries, each entry holding C results. In drain cycle `s`, row `i` outputs
  output row `i*A + s%A` for channels `(s/A)*C .. +C-1`.

## Dynamic activation pruning (`dap`)

`dap` handles one dense 8-element block. It is a cascade of 5
magnitude-maxpool stages. Each stage is a 4-2-1 tree of 7 comparators that
finds the largest |x| among the elements not yet taken. Ties go to the lower
position. Stages at or above the configured NNZ are bypassed.

* **NNZ 1..5:** the result is the Top-NNZ block. If the block has fewer
  non-zeros than NNZ, zeros are kept too, so every block takes exactly NNZ
  cycles.
* **NNZ 6..8:** the maxpools are bypassed and only zeros are dropped. At 8/8
  (dense) nothing is ever lost. At 6/8 or 7/8 a block with too many non-zeros
  keeps its lowest-positioned NNZ elements, and `ovf_cnt_o` counts such
  blocks.

Supporting 6/8 and 7/8 this way is this design's own choice. The published
DAP range is 1/8 to 5/8, plus dense.

The top level has 64 DAP units, one per array lane. They sit combinationally
on the activation-buffer read path. Each unit's output goes into an
`act_serializer`, a shift register that emits one element per cycle in
ascending position order.

## Buffers and tile sequencing (`dbuf_sram`, `sram_sp`, `s2ta_ctrl`)

Each buffer has two single-ported banks.

* **Ports.** The array port and the external port (MCU/DMA side) may use
  different banks in the same cycle, which lets transfers overlap
  computation. If both address the same bank, the array wins and `e_gnt_o`
  stays low until the external request can be served.
* **WB word.** One word holds all 32 weight blocks of one channel block: 1280
  bits, masks included. This gives 1638 words per 256 KB bank.
* **AB word.** One word holds the 64 dense activation blocks of one channel
  block: 4096 bits, with lane `l = i*A + a` at byte `l*8 + e`. This gives 2048
  words per 1 MB bank.
* **Results.** Each AB word holds four result segments of M*C INT32 values.

`s2ta_ctrl` computes one 64-row x 32-channel output tile per `start_i`, as
configured by `tile_cfg_t`:

* NNZ;
* the number of channel blocks KB;
* WB, AB and output base addresses;
* the bank selects.

It runs these phases:

| phase  | cycles     | action |
|--------|------------|--------|
| CLR    | 1          | clear accumulators |
| STREAM | KB*NA      | read 1 WB and 1 AB word per block period; one cycle later, load the serializers and the weight holding register |
| FLUSH  | M+N+1      | let the last wavefront leave the array |
| DRAIN  | N*A        | shift results out and write them to AB at `o_base + s/4`, segment `s%4` |

`busy_o` is therefore high for KB*NA + M + N + N*A + 2 cycles.

Choices the paper leaves open and that are made here:

* draining is not overlapped with the next tile, since there is one
  accumulator per MAC;
* the MCUs requantize the INT32 results and write back INT8 activations for
  the next layer;
* dense (unpruned) weights run as two 4/8 blocks with masks `0x0F` and `0xF0`,
  paired with the same activation block stored twice.

## What is outside the RTL

The four Cortex-M33 microcontrollers and their control-store SRAMs are not
included. They handle configuration, DMA, activation functions, pooling and
requantization. The AXI DMA interface is not included either. The top level
exposes what they would drive:

* the external ports of both buffers;
* `start_i`, `cfg_i`, `busy_o` and `done_o`.

## Departures and open points

* **Buffer sizes.** One published table lists the buffers the other way round
  (2 MB weights, 0.5 MB activations). This design follows the text: 0.5 MB
  WB and 2 MB AB.
* **DAP placement.** DAP is placed on the AB read path, so AB stores dense
  activations. A design that stores activations compressed in AB would save
  SRAM bandwidth. That variant is not built.
* **Your own choices.** Timing closure at 1 GHz (pipelining the DAP cascade or
  the 4:1 mux) is not addressed. Word layouts, arbitration and the
  configuration format are this design's own.

## Files and simulation

`rtl/` holds one module or package per file:

* `s2ta_pkg`: types and constants;
* `dp1m4`, `tpe`, `tpe_array`, `delay_line`: datapath;
* `dap`, `act_serializer`: activation path;
* `sram_sp`, `dbuf_sram`: buffers;
* `s2ta_ctrl`: controller;
* `s2ta_top`: top level.

`tb/` holds one self-checking testbench per module. Each compares against an
independent reference model and prints `TB_RESULT checks=N failures=M`.

`tb_s2ta_top` runs the full-size design end to end. It covers:

* 4/8, 8/8, 6/8 (overflow), 1/8, 3/8 and a dense-weight tile;
* a check of every result and of the cycle count;
* buffer stalls, overlapped transfers and a bank swap.

Example:

    verilator --binary --timing --assert -Irtl rtl/s2ta_pkg.sv rtl/*.sv \
        tb/tb_s2ta_top.sv --top-module tb_s2ta_top -o sim
    obj_dir/sim

The full-size top-level simulation finishes in well under a second.
