# A ReRAM tile for block-wise mixed-precision weights

## The idea

A ReRAM crossbar multiplies a vector by a matrix in place. Each cell holds a
weight bit as a conductance, and each bitline sums the currents of the driven
wordlines. In practice only a small window of the array can be switched on at
once without losing accuracy: 9 wordlines by 8 bitlines. This window is the
*operation unit* (OU). A 128 x 128 array is therefore worked through one OU
per cycle, and ADC conversions dominate both time and energy. Fewer weight
bits means fewer OUs to visit, and so fewer cycles.

The quantisation scheme this tile serves cuts each layer's weight matrix into
9 x 8 *weight blocks* (WBs), the size of an OU. Each block gets its own
precision, from 0 to 8 bits. Training drops, block by block, the high-order
bit planes that are zero for every weight in the block. The hardware problem
is to compute with blocks of many different precisions on one crossbar,
without index logic and without idle columns inside an OU.

Two things solve it:

* **Precision-aware mapping.** Bit plane *b* of a block fills a whole OU: OU
  cell (r, n) holds bit *b* of weight (r, n) of the block. A block of
  precision *p* therefore takes *p* OUs side by side in the same OU row. No
  OU is ever partly used. An OU left free because a block row needs fewer
  planes in total is a *spare OU*, and it is never visited.
* **A memory controller with a bit-width table.** It knows every block's
  precision and so steps straight through the occupied OUs. It drives the
  wordline decoder (which OU row), the bitline MUX (which OU column), the
  shift-and-add units (skip: a new block starts) and the input register
  (fetch: a new block row starts).

## Data layout in a bank

One bank = one 128 x 128 crossbar of 1-bit cells. Wordlines 9j .. 9j+8 form
OU row *j* (j = 0..13; wordlines 126 and 127 are unused). Bitlines 8c .. 8c+7
form OU column *c* (c = 0..15).

The blocks of OU row *j* are numbered i = 0, 1, ... (the *WB index*, which
selects an output-channel group). They are packed from OU column 0 in index
order. With `colstart(j,i)` the sum of the precisions of blocks 0..i-1 of
row *j*, block (j,i) of precision p is stored as follows:

```
bit b of weight (r, n) of block (j,i)  ->  wordline 9j + r,
                                          bitline  8*(colstart(j,i) + p-1-b) + n
```

The most significant plane comes first. The total precision of a row must
not exceed 16 OU columns; an assertion checks this. A block of precision 0
takes no column and no cycle. The bit-width table holds 14 x 16 entries of
4 bits.

Weights are stored as magnitudes. A signed layer uses two banks over the same
inputs, one for the positive and one for the negative parts, and the second
bank is flagged `negate`.

## The OU schedule

For one run the controller executes these nested loops, outermost first:

```
for t in 0 .. act_prec-1                  activation bit, LSB first (1-bit DACs)
  for j in 0 .. num_vblk-1                block row (skipped if all blocks are 0-bit)
    fetch bit t of activations 9j..9j+8   -> ir_en, once per row, reused below
    col = 0
    for i in 0 .. num_hblk-1 with p = bw[j][i] > 0
      for k in 0 .. p-1                   bit plane p-1-k (MSB first)
        issue OU (row j, column col); skip = (k == 0); last = (k == p-1)
        col = col + 1
```

Exactly one OU is issued per cycle, with no bubble between blocks, rows or
activation bits. A run therefore takes `act_prec * sum(bw)` cycles of issue.

The two-block example of a 4 x 4 array with 2 x 2 OUs has a 2-bit block over
rows 1-2 and a 1-bit block over rows 3-4, with 2-bit activations. It takes 6
cycles:

| cycle | act. bit | OU row | OU column | skip | IR fetch |
|-------|----------|--------|-----------|------|----------|
| C1    | 0        | 0      | 0         | 1    | 1        |
| C2    | 0        | 0      | 1         | 0    | 0        |
| C3    | 0        | 1      | 0         | 1    | 1        |
| C4    | 1        | 0      | 0         | 1    | 1        |
| C5    | 1        | 0      | 1         | 0    | 0        |
| C6    | 1        | 1      | 0         | 1    | 1        |

`tb_memory_controller` replays this example.

## Bank pipeline

```
 cycle 0                 cycle 1                                         cycle 2        cycle 3
 memory_controller  -->  cmd reg --> wl_decoder --> crossbar --> bl_mux --> adc --> shift_add --> output register --> bus
   (cmd, ir_en)          IR latch -----^                                     (psum)       (queue, 4 deep)
```

* The shift-and-add unit computes `psum = skip ? adc : (psum << 1) + adc` in
  each of its 8 lanes. After the last plane, lane n holds
  `sum_r bit_t(a[9j+r]) * w[r][n]`.
* The result, tagged with (j, i, t), is queued in the bank's output register.
  The register raises `almost_full` at 2 entries, because two more results
  may already be in the pipeline. That holds the controller: this is the only
  stall in the design.
* Timing: N OUs issue on the N cycles after `start`. The last result is
  presented N+3 cycles after `start` if the bus takes results at once.

## The tile

```
 ir_* --> tile IR (256 x 64 b) --LOAD--> bank IR x4 --> PIM bank x4 --> tile_bus --> accumulation_unit
                                                                        (round robin)      |
 or_* <-- tile OR (256 x 8 b) <--------------- activation_unit (PACT) <----------ACT--------+
```

`bwq_tile` runs three phases after `start`:

1. **LOAD.** Copies 16 words per bank from the tile IR at `in_base[b]` into
   each bank's input register (64 cycles), and clears the accumulators.
2. **RUN.** Starts the banks in `bank_en`. The bus grants one bank result
   per cycle. The accumulation unit adds `±psum << t` into the channels
   `8*(out_base[b] + i) + n`, up to 256 channels.
3. **ACT.** Passes channels `0 .. num_out-1` through
   `q = min((clamp(x, 0, beta) * mult) >> 16, 2^act_prec_out - 1)` and
   writes them to the tile OR. Then `done` pulses.

Before `start`, the host loads the tile IR (`ir_*`), the crossbars
(`prog_*`, one 128-bit wordline per write) and the bit-width tables
(`lut_*`). Five status outputs pulse on events: bank stalled, bank done, bus
conflict, PACT clip at 0, PACT clip at beta.

## Files

| file | block |
|------|-------|
| `rtl/bwq_pkg.sv` | sizes, `ou_cmd_t`, `wb_tag_t` |
| `rtl/memory_controller.sv` | bit-width table and OU scheduler |
| `rtl/bank_input_register.sv` | bank activations, row/bit fetch |
| `rtl/wl_decoder.sv` | OU-row decoder with 1-bit drivers |
| `rtl/reram_crossbar.sv` | behavioural model of the 128 x 128 array |
| `rtl/bl_mux.sv` | OU-column bitline select |
| `rtl/adc_array.sv` | behavioural model of the 4-bit ADCs |
| `rtl/shift_add.sv` | shift-and-add units |
| `rtl/bank_output_register.sv` | result queue with stall |
| `rtl/pim_bank.sv` | one bank |
| `rtl/tile_bus.sv` | round-robin bank-to-accumulator bus |
| `rtl/accumulation_unit.sv` | per-channel accumulators |
| `rtl/activation_unit.sv` | PACT clip and requantisation |
| `rtl/tile_sram.sv` | tile input / output registers |
| `rtl/bwq_tile.sv` | the tile (top) |

Every module has a self-checking testbench `tb/tb_<module>.sv`, which prints
`TB_RESULT checks=N failures=M`. `tb_bwq_tile` runs the tile at its default
size, with random layers, signed weights and PACT. It compares all 256
outputs with a reference model. It also counts how often each mechanism
occurs (skip, activation reuse, 0-bit blocks, spare OUs, stalls, bus
conflicts, subtraction, clipping at both ends) and fails if one never
occurs. It takes well under a second.

`tb_workload_conv` runs one whole convolution layer of a small CIFAR-10
ResNet (3 x 3 kernel, 16 to 16 channels: 144 inputs by 16 outputs). It uses
2-bit average block precision and 3-bit activations. The layer is split by
rows over two bank pairs, each made of a positive bank and a negative bank.
Bank 0 visits 192 OUs, where an 8-bit uniform mapping would need 672.

To simulate:

```
verilator --binary --timing --assert -y rtl -Irtl rtl/bwq_pkg.sv tb/tb_bwq_tile.sv --top-module tb_bwq_tile
./obj_dir/Vtb_bwq_tile
```

## How far it follows the source design, and where it departs

These parts follow the architecture as published: the tile contents, the bank
contents, the 9 x 8 OU, the 128 x 128 one-bit crossbar, the 4-bit ADC and
1-bit DACs, the 2 KB / 256 B tile registers, the 64-bit word, the
precision-aware mapping, the bit-width table, and the three controller
outputs (address, skip, fetch) with the MSB-first shift-left accumulation.

Choices of this design:

* **ADC count.** There is one ADC and one shift-and-add unit per OU bitline
  (8 per bank), so an OU converts in one cycle. The published configuration
  lists 4 shift-and-add units per bank, and its figure draws 4 ADCs. That
  cannot convert an 8-bitline OU in a single cycle, so this design departs
  from it.
* **Block placement.** Blocks are packed from the left of each row. The
  published two-block example shows the 1-bit block in the right-hand OU
  column of its row, with the spare OU on the left. The cycle counts are the
  same either way.
* **Loop order.** Activation bits form the outer loop. The published control
  algorithm has no activation-bit loop; its example shows that order.
* **Signs, activations and control.** Sign handling (two banks, subtraction),
  LSB-first activation bits, the shift by activation bit in the accumulation
  unit, the requantisation step, the bus arbitration, the output queue and
  its stall, the tile sequencer, the bank IR word layout and the reset
  behaviour are all this design's own.
* **Analog parts.** The crossbar and the ADCs are ideal behavioural models.
  Conductance variation and IR drop are not modelled; the OU size exists to
  bound them.
* **Outside the tile.** The network between tiles, external memory and the
  functional unit's local buffer are not built. The tile's load and read
  ports stand in for the first two; the local buffer's role is not specified.

## Capacity

One tile holds 4 x 128 x 128 = 65,536 weight bits. A bank computes a layer
slice of up to 126 inputs by 128 output channels (16 groups of 8), with
per-block precision. Even at the published compression ratios, a whole
network needs from about 9 tiles (ResNet-20 on CIFAR-10: 0.27 M weights at
16x is 0.54 Mbit) to about 800 (ImageNet ResNet-34: 21.8 M weights at 13.6x
is 51.5 Mbit). The tile is the unit to replicate. How many tiles a chip
carries, and how layers are split across them, is left to the system around
it.
