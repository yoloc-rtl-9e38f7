# YOLoC in SystemVerilog: ROM computing-in-memory with a residual SRAM branch

Large CNNs such as YOLO (about 46 M weights) do not fit in the SRAM of a
single computing-in-memory (CiM) chip. Their weights have to be streamed in
from DRAM over and over, and that traffic uses most of the energy. YOLoC
instead stores the pretrained weights in **ROM-CiM**. In that array each cell
is a single transistor, and a weight bit is set by whether the transistor's
gate is wired to the word line or to ground. The array is about 20x denser
than SRAM-CiM. Because ROM cannot be rewritten, each fixed layer (the *trunk*)
is paired with a small **residual branch** (ReBranch):

```
            +--------------- trunk: N -> M, ROM-CiM ----------------+
 x (N ch) --+                                                       (+)--> ReLU --> y (M ch)
            +-- Res-Compress N->N/D --> Res-Conv N/D->M/U --> Res-Decompress M/U->M --+
                 (ROM-CiM, fixed)       (SRAM-CiM, trainable)   (ROM-CiM, fixed)
```

Only the Res-Conv weights are rewritable. They make up 1/(D*U) of a layer's
weights (1/16 for D = U = 4), and retraining just them moves the network to
a new task. The chip is built from ROM-CiM macros, one SRAM-CiM macro, a
cache for feature maps, and a controller. The controller moves data, applies
the activation function, and does pooling.

This RTL models that chip at the level of bit lines, ADCs and command
scheduling. It can be simulated with Verilator, and it produces exact
(noise-free) CiM results.

## The CiM macro: how one multiply-accumulate happens

A macro (`rom_cim_macro`, `sram_cim_macro`) is an array of 128 word lines x
256 bit lines, with these peripherals:

* **Cells and bit lines** (`rom_cim_cell`, `rom_cim_array`, `sram_cim_array`).
  A cell pulls its bit line down only when its word line is high *and* it
  stores '1'. All bit lines are pre-charged first. The charge each bit line
  then loses is the number of (pulse, conducting cell) pairs on it. The model
  represents the bit-line voltage by this integer, `bl_level`, which is 0
  right after pre-charge.
* **Input driver** (`input_driver`). Activations are 8 bits wide. Each is
  split into four 2-bit digits. A digit of value v is applied as v pulses, so
  each digit takes three pulse cycles (the unary input encoding). Only one
  row group of 8 word lines is driven per operation. With at most 3 pulses on
  each of 8 rows, a bit line loses at most 24 units, which stays inside the
  ADC's 0..31 range. The ADC therefore never clips, and results are exact.
* **Column-shared ADCs** (`adc`). There are 16 ADCs of 5 bits each. ADC k
  serves columns 16k..16k+15 and converts one of them per cycle ("slot"). A
  bit line keeps its remaining charge, so all 16 slots can be read after a
  single pulse phase.
* **Weight layout and shift & add** (`shift_add`). Output o uses columns
  8o..8o+7, with weight bit b in column 8o+b. Weights are two's complement,
  so column 8o+7 counts -128. The code read at slot s, digit d is shifted by
  b + 2d and added, or subtracted for the sign bit. One ADC therefore feeds
  two outputs, and the 16 ADCs update all 32 accumulators without conflict.
* **Sequencer** (`cim_ctrl`). For each digit it runs 1 pre-charge cycle,
  3 pulse cycles and 16 ADC cycles, which is 20 cycles per digit. One
  unsigned operation takes 4 x 20 + 2 = **82 cycles** from start to done.
* **Signed activations.** A word line can only carry a non-negative number of
  pulses. Signed inputs (the branch's intermediate values) are therefore
  applied in two passes. The first pass drives the positive activations. The
  second drives the magnitudes of the negative ones, and their products are
  subtracted. A signed operation takes **162 cycles**.
* **Output buffer** (`out_buffer`). It captures the 32 sums when an operation
  ends, so the controller can read them while the macro computes again.

The accumulators are cleared only on request (`acc_clear`). Summing over more
than 8 input channels is therefore a series of operations on successive row
groups. The **trunk + branch addition** works the same way: the
Res-Decompress weights sit in other rows of the same ROM macro and the same
output columns as the trunk weights. Running Res-Decompress without a clear
adds the branch onto the trunk sums.

One operation multiplies 8 activations by 8 x 32 weights, which is 256
8-bit x 8-bit MACs.

The ROM contents are fixed at elaboration by `yoloc_pkg::rom_bit(seed, row,
col)`. This is a 32-bit integer hash that stands in for a mask holding real
pretrained weights:

```
h = row*0x9E3779B1 ^ col*0x85EBCA77 ^ seed*0xC2B2AE3D;
h ^= h >> 15;  h *= 0x2C1B3C6D;  h ^= h >> 12;  bit = h[7]
```

To put real weights in the ROM, replace this function. For example, index a
localparam table with (seed, row, col).

## The chip: controller, cache and commands

`yoloc_top` contains 2 ROM-CiM macros (with seeds 1 and 2) and 1 SRAM-CiM
macro. It also has a 4096 x 64-bit cache, in which each word holds the 8
activations of one row group, and `yoloc_ctrl`. `yoloc_ctrl` contains:

* the IO command FIFO (`io_fifo`, 4 entries, valid/ready);
* the activation unit (`act_unit`): arithmetic right shift, optional ReLU,
  and saturation to int8 or uint8;
* the pooling unit (`pool_unit`): element-wise max of two cache words. A
  2x2 max pool takes three steps.

Commands (`yoloc_pkg::cmd_t`) are executed one at a time:

| op   | effect | cycles |
|------|--------|--------|
| CWR  | write `data` to cache word `addr_d` | 2 |
| CRD  | read cache word `addr_a`; the word appears on `resp_data` with `resp_valid` | 3 |
| SWR  | write `data[31:0]` into SRAM-CiM row `srow`, bits 32*`sword`.. (the power-on weight load) | 2 |
| MVM  | read cache word `addr_a` and start macro `macro` on row group `group` (`in_signed`, `acc_clear`) | 3 |
| WB   | write outputs 8*`lane_blk`..+7 of `macro`, after `act_unit` (`shift`, `relu`, `out_signed`), to `addr_d` | 2 |
| POOL | write max(`addr_a`, `addr_b`) (`out_signed`) to `addr_d` | 4 |

An MVM only *starts* a macro, so the macros compute in parallel. An MVM, a
WB, or an SWR aimed at the SRAM-CiM waits while its target macro is busy;
the `stall` output is high during that wait. Macro index `N_ROM` (2) is the
SRAM-CiM.

A ReBranch layer with N = 64 inputs, M = 32 outputs and D = U = 4 is mapped
as follows. `tb/yoloc_top_tb.sv` runs exactly this sequence.

1. Load the Res-Conv weights with SWR (SRAM rows 0..15, outputs 0..7), and
   load x into cache words 0..7 with CWR.
2. For g = 0..7: MVM on ROM 0, group g (the trunk, rows 0..63), and MVM on
   ROM 1, group g (Res-Compress, outputs 0..15). The two macros overlap, and
   each back-to-back MVM stalls until its macro is free.
3. WB ROM 1, lanes 0..15, as signed values: the compressed branch.
4. Two signed MVMs on the SRAM-CiM (Res-Conv), then WB of 8 signed values.
5. One signed MVM on ROM 0, row group 8, without clear (Res-Decompress added
   onto the trunk).
6. WB ROM 0 with ReLU into four unsigned words, then POOL.

## Departures from the source and open points

These choices are not in the source description, or differ from it:

* **Macro size.** The 1.2 Mb macro size quoted for the ROM-CiM is not a
  whole number of 128 x 256 arrays. Here one macro is one 128 x 256 array,
  which is the array organisation drawn for the macro.
* **Chip size.** The number of macros, the cache size, the SRAM-CiM size
  (assumed equal to the ROM-CiM size) and the command set are this design's
  own. With 2 ROM macros the chip holds 8 K ROM weights. It cannot hold the
  evaluated networks (YOLO, Tiny-YOLO, ResNet-18, VGG-8), which would need
  hundreds of macros and a scheduler for whole convolution layers. The
  controller here executes one command at a time, from a host.
* **Analog behaviour.** Bit lines and ADCs are ideal: one cell per pulse
  removes one LSB. There is no noise, no non-linearity and no timing model.
  The source quotes 8.9 ns per operation; no clock is specified here, so
  only cycle counts are modelled.
* **Not present.** The on-chip network drawn in the chip overview is not
  described and is not built; the macros connect to the controller directly.
  DRAM is outside the chip; its traffic arrives as commands.
* **Encodings.** Weight bit layout, two's complement weights, the two-pass
  signed input scheme, 8 active rows, ReLU and power-of-two requantisation
  are all this design's choices.

## Files and simulation

The files in `rtl/` are:

* `yoloc_pkg.sv` (sizes, types, command struct, ROM function);
* `rom_cim_cell`, `rom_cim_array`, `sram_cim_array` and `adc`, which are
  behavioural models of analog parts;
* `input_driver`, `shift_add`, `cim_ctrl`, `out_buffer`, `rom_cim_macro` and
  `sram_cim_macro`;
* `cache`, `act_unit`, `pool_unit`, `io_fifo`, `yoloc_ctrl` and `yoloc_top`.

Each module has a self-checking testbench `tb/<module>_tb.sv`, and
`tb/tb_ref_pkg.sv` holds the reference models. Every testbench prints
`TB_RESULT checks=N failures=F`. To simulate one, for example the whole
chip:

```
verilator --binary --timing --assert -Wno-fatal --top-module yoloc_top_tb \
  -y rtl -y tb rtl/yoloc_pkg.sv tb/tb_ref_pkg.sv tb/yoloc_top_tb.sv
./obj_dir/Vyoloc_top_tb
```

`yoloc_top_tb` runs at the default sizes. About 3 minutes of the run is
Verilator compile time, because the three macros contain 3 x 32 K cells; the
simulation itself takes under a second.

To change the ROM contents, edit `rom_bit` in both `rtl/yoloc_pkg.sv` and
`tb/tb_ref_pkg.sv` (the reference). The geometry constants are in
`yoloc_pkg`. `ACTIVE_ROWS` trades the number of operations against ADC
clipping: above 10 rows, the 5-bit ADC saturates.
