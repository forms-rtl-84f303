# Fine-grained polarized ReRAM tile: RTL

ReRAM crossbars compute a matrix-vector product in place. Each input bit
drives a wordline, each cell's conductance holds a weight, and each bitline
current is a dot product. A conductance cannot be negative, so signed weights
usually cost either a second crossbar for the negative part or an offset that
has to be corrected later. This design avoids both. The weights are trained so
that every **fragment**, meaning the 8 weights that share one column of an
8-row sub-array, has a single sign. The crossbar then stores only magnitudes.
One sign bit per fragment tells the digital accumulator whether to add or
subtract that fragment's column result.

Short 8-row fragments help a second time. Inputs are fed bit-serially, least
significant bit first. A fragment only needs as many bit cycles as its widest
input has bits. Once the 8 input registers of a fragment hold nothing but
zeros, the remaining bits are skipped. This is **zero skipping**. The fewer
inputs share a fragment, the more often their upper bits are all zero.

The RTL describes one **tile**: 12 MAC units (MCUs) of 8 crossbars each, a
128 KB eDRAM activation buffer, and the digital unit that finishes the sums.
The digital unit does shift-and-add, ReLU, an output register and 4-to-1 max
pooling. The mesh network between tiles, the chip controller and the off-chip
link are not part of this RTL. The tile's external ports take their place.

## Number formats and sizes

| quantity | value | where it is set |
|---|---|---|
| activations | 16-bit unsigned, fed LSB first | `forms_pkg::IN_BITS` |
| weights | 8-bit magnitude in four 2-bit cells, plus one sign per fragment | `W_BITS`, `CELL_BITS`, `CELLS` |
| crossbar | 128 x 128 cells, split into 16 sub-array rows of 8 rows | `XB_ROWS`, `XB_COLS`, `FRAG` |
| ADCs | 4 per crossbar, 4-bit, each serving 32 adjacent columns | `NADC`, `ADC_BITS` |
| per-column sum | 25-bit signed | `ACC_W` |
| shift-and-add result | 40-bit signed | `OUT_W` |
| MCU / tile | 8 crossbars per MCU, 12 MCUs per tile | `NXB_MCU`, `NMCU` |
| eDRAM | 128 KB in 2048 rows of 512 bits, one write enable per 16-bit word | `EDRAM_BYTES`, `ROW_BITS` |

A weight column of the crossbar is 4 physical columns, so one crossbar holds
32 weight columns of 128 weights each. Cell slice 0 is the least significant
2 bits.

## One crossbar: how a column sum is formed

`xbar_unit` is one crossbar with everything around it. It contains:

- 128 parallel-in, serial-out input registers (`input_shift_reg`);
- one zero-skipping AND per fragment (`zero_skip_logic`), fed by each
  register's NOR of its remaining bits;
- the sub-array decoder;
- the crossbar model, with a sample-and-hold on every column;
- 4 ADCs;
- one accumulation block (`acc_block`) per ADC;
- the sign indicator;
- the controller (`xbar_ctrl`).

For input vector `x`, cell levels `L` and fragment signs `sgn`, the crossbar
produces, for every physical column `c`:

    psum[c] = sum over sub-array rows g of  (-1)^sgn[g][c/4]
              * sum over input bits b of 2^b * min(15, sum_{r in g} x_r[b] * L[r][c])

The `min(15, ...)` term is the 4-bit ADC. Eight rows of 2-bit cells can sum to
24 levels, but the ADC has 16, so larger sums clip. How such sums should be
handled is not specified, and the saturation here is this design's choice. The
testbenches use the same formula, so results are exact apart from this
clipping.

### Slots and the bit pipeline

Time is counted in **slots** of 32 clocks. The clock is the ADC sample clock,
2.1 GHz in the reference design. An ADC converts one column per clock, so a
slot is what it needs to convert its 32 columns. One input bit is fed per slot:

1. In slot *n*, the controller's current sub-array row puts the LSBs of its 8
   registers on the wordlines. The decoder enables only that row.
2. On the last clock of the slot, the column sums are captured in the
   sample-and-hold, tagged with the row and the bit position, and that row's
   8 registers shift right by one.
3. In slot *n+1*, the ADCs sweep the held columns while the array already
   takes the next bit. Each ADC code enters its accumulation block one clock
   after conversion. There it is shifted left by its bit position, inverted if
   the fragment is negative, and added with carry-in = sign, which makes the
   two's complement, into the column's register.

At the first clock of each slot, the controller decides whether the current
row is finished:

- With zero skipping on, a row is finished when its zero-skipping AND is 1,
  meaning all 8 registers are empty.
- With zero skipping off, a row is finished after 16 bits.

The controller then moves to the next row that has work. With skipping on, a
row whose inputs are all zero never gets a slot. One last slot drains the
final held sample. A crossbar operation therefore takes:

    clocks = 32 * (1 + bits fed) + 4     (4 if no row has work)

Here *bits fed* is, summed over the 16 rows, each row's **effective input
cycles**: the bit position of the highest 1 among its 8 inputs. With skipping
off, it is 256. `bit_slots` reports the figure after every run. The
`skip_en` input exists to compare the two modes.

### Sign handling

The sign indicator is one bit per fragment (16 sub-array rows x 32 weight
columns); 1 means negative. The four cell columns of a weight share their
fragment's bit. A 1R cell array in the reference design, it is modelled
here as flip-flops.

## MCU and tile

`mcu` starts its 8 crossbars together. Each one finishes when its own
fragments are done. The MCU reports `done` one clock after the slowest
finishes. The crossbars' accumulation registers are the MCU output registers.

`tile` runs one **layer operation** per `start`. Its configuration struct is
`forms_pkg::layer_cfg_t`. The mapping is as follows:

- The `n_xb` crossbars in use form groups of `G`. A group holds `G*128` rows
  of the same 32 weight columns.
- Crossbar `k` takes input segment `k mod G`. A segment is 128 activations in
  eDRAM rows `in_base + 4*(k mod G) .. +3`.
- Group `o` produces outputs `32*o .. 32*o+31`, written to eDRAM words
  `out_base + 32*o + j`.

`tile_ctrl` runs the phases in order:

1. **Input read**: 4 eDRAM rows per crossbar go into that crossbar's input
   buffer.
2. **MAC**: all MCUs are started, and the controller waits for every MCU.
3. **Digital unit**: for each output, the controller streams the four
   cell-slice sums of each crossbar of the group into `shift_add`. Stage 1
   combines the slices as `sum slice[s] * 4^s`. Stage 2 adds up the group's
   crossbars. `relu` then clamps negatives to zero, shifts right by `shamt`
   and saturates to 16 bits. The output register holds the value for one
   clock while it is written to eDRAM.
4. **Pooling** (optional): for each window `w`, the controller reads words
   `out_base+4w .. +3` one per clock into `maxpool` and writes the maximum
   back to word `out_base + w`.

All MCUs start together. Crossbars beyond `n_xb` are fed zeros, so stale
inputs left by an earlier layer cannot hold up `done`. With zero skipping on,
such a crossbar finishes in its first slot check.

The whole operation takes:

    4*n_xb + 32*(1 + most bits fed to one crossbar) + G*outputs + 6*pooled + 14

clocks. The full-size testbench runs 96 crossbars in groups of 4: 768 outputs
and 192 pooled words in about 9,300 clocks with zero skipping. With skipping
off and `G = 1`, 3072 outputs take 11,694 clocks.

### Ports

- `ext_req/ext_addr/ext_we/ext_wdata/ext_rdata`: access to the eDRAM while
  the tile is idle, one 512-bit row per request. Read data arrives one clock
  after the request.
- `prog_xb`, `prog_xb_wr/prog_row/prog_levels`: write one row of 128 2-bit
  levels into crossbar `prog_xb`.
- `prog_sg_wr/prog_sub/prog_signs`: write one sub-array row of 32 fragment
  signs into crossbar `prog_xb`.
- `start`, `cfg`, `busy`, `done`: the layer operation. `done` pulses for one
  clock.
- `bit_slots[k]`, `n_outputs`, `n_pooled`: counters of the last operation.

## What is modelled, and how far to trust it

- `crossbar_array` and `adc` are **behavioural models** of analog parts. The
  crossbar current is the exact integer sum of bit x level, with no noise,
  device variation, IR drop or conductance non-linearity. The ADC is ideal
  apart from its clipping. The 1-bit DACs are wires in this model, because a
  two-valued DAC passes its bit through.
- Programming the crossbar is one row per clock. The real write path (a
  global driver and a charge pump) is analog and not modelled.
- The eDRAM is a synchronous single-port array with one clock of read
  latency. Refresh and real eDRAM timing are not modelled.
- Everything else is synthesizable RTL.

## Where this design departs from the reference architecture, or fills gaps

- **One operation at a time.** The reference pipeline overlaps successive
  input vectors and layers: it loads the next inputs of a fragment as soon as
  its zero-skipping AND fires, and moves data between tiles. Here each
  crossbar processes one input vector per operation, and all phases run one
  after the other. The bit-level overlap of crossbar, ADC and accumulation
  inside a crossbar is kept.
- **Slot length.** One input bit per 32-clock slot follows from one ADC per
  32 columns at one conversion per clock. That gives the 15 ns bit period at
  2.1 GHz.
- **When the ADC converts.** One reading of the zero-skipping description is
  that the ADC starts only once a fragment's inputs are all shifted out. A
  crossbar column keeps no memory of earlier bits, so here every fed bit is
  sampled and converted. Zero skipping saves the slots of bits that are never
  fed. The fragment's AND flag decides when the controller moves to the next
  sub-array row.
- **One digital unit.** A tile is described with several digital units. Here
  one shift-and-add, ReLU and output-register chain serves the whole tile, one
  output word per clock.
- **Bit order.** Feeding LSB first is implied by skipping the upper zero bits.
  It is not stated directly.
- **Input width.** The architecture is described with 16-bit activations in
  the evaluation. The description of the skipping logic once speaks of 8-bit
  values. 16 bits are used here.
- **Shift-and-add placement.** Shift-and-add units are listed four per MCU,
  while the figure of the MCU shows one accumulation block per ADC and the
  tile's digital unit also has shift-and-add. Here the input-bit shift sits
  in the accumulation block, and the cell-slice and cross-crossbar merging sit
  in the digital unit, with two register stages to match the two shift-and-add
  pipeline stages.
- **Carry-in.** The accumulation block's mux selects the code or its
  inverse. The carry-in that completes the subtraction is this design's.
- **Widths and conversion.** The accumulator widths, the ReLU requantising
  shift and the 16-bit saturation are this design's.
- **Pooling.** The reference pipeline reads the eDRAM for pooling over 14
  cycles. Here a window takes 6 clocks, and the 4 pooled values must be
  consecutive words.
- **Interfaces.** The layer configuration, the crossbar-to-group mapping rule
  and all external ports are this design's.

## Capacity

One tile holds 96 x 128 x 32 = 393,216 8-bit weights, and its eDRAM holds
65,536 16-bit activations. The following sizes are estimates: the usual
parameter counts of these networks, divided by the pruning ratios reported
for this architecture. On those estimates, the pruned LeNet-5 (MNIST),
ResNet-18 (CIFAR-10) and VGG-16 (CIFAR-10; about 364 K weights, so only when
all crossbars are filled) fit in a single tile, one layer operation per layer
after reprogramming. `tb_lenet_fc` runs LeNet-5's three fully connected
layers (400-120-84-10) this way on a 16-crossbar tile. The weights are
polarized and pruned, and each layer reads the previous layer's outputs from
the eDRAM. With skipping on, the three layers take 4,366, 4,890 and 4,082
clocks. Zero skipping left out 3,107 of the 5,120 input bit slots. The
CIFAR-100 and ImageNet models need several tiles,
and so the multi-tile chip, which is not in this RTL.

## Files

RTL (`rtl/`), bottom up:

| file | role |
|---|---|
| `forms_pkg.sv` | sizes and the layer configuration type |
| `input_shift_reg.sv` | parallel-in serial-out input register with zero detect |
| `zero_skip_logic.sv` | per-fragment AND of the register zero flags |
| `subarray_decoder.sv` | one-hot enable of the active sub-array row |
| `crossbar_array.sv` | behavioural crossbar with sample-and-hold |
| `adc.sv` | behavioural 4-bit ADC with 32:1 column select |
| `sign_indicator.sv` | fragment sign bits |
| `acc_block.sv` | shift, sign mux, adder, per-column registers |
| `xbar_ctrl.sv` | slot sequencing and zero skipping per crossbar |
| `xbar_unit.sv` | one crossbar with its periphery |
| `mcu.sv` | eight crossbar units |
| `shift_add.sv` | cell-slice and cross-crossbar merging |
| `relu.sv` | ReLU, requantising shift, saturation |
| `maxpool.sv` | maximum of 4 |
| `edram.sv` | 128 KB activation buffer |
| `tile_ctrl.sv` | tile sequencer |
| `tile.sv` | top level |

Testbenches (`tb/`): `tb_<block>.sv` for each block. `tb_tile.sv` runs the
tile end to end at one MCU of 4 crossbars, and `tb_tile_full.sv` runs it at
its default size. `tb_lenet_fc` chains three layer operations as a
classifier. Every testbench checks its results against values computed
in the testbench itself, and prints `TB_RESULT checks=N failures=M`. The tile
tests also count the mechanisms they exercise: skipped bits, all-zero
fragments, ADC clipping, negative fragments, ReLU clamping and saturation,
grouped crossbars, pooling, and runs with skipping off. A mechanism that never
occurs counts as a failure.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -j 4 --top-module tb_tile \
        -y rtl -y tb +libext+.sv -Irtl rtl/forms_pkg.sv tb/tb_tile.sv
    ./obj_dir/Vtb_tile

Replace `tb_tile` with any other testbench name. The full-size tile test takes
about two minutes to build and a few seconds to run. Sizes are package
constants. The tile's `NM` and `NXB` parameters, and each block's own
parameters, can be overridden for smaller experiments.
