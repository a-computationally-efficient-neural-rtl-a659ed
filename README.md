# A sparse fast-transform accelerator for neural video decoding

Learned video codecs decode with stacks of 3x3 convolutions (Conv) and
stride-2 4x4 transposed convolutions (DeConv) at high resolution. Two ideas
make that cheap in this design:

1. **Both layer types run in a fast-transform domain on one datapath.**
   A 3x3 Conv uses the Winograd algorithm F(2x2,3x3): a 4x4 input patch is
   transformed, multiplied element by element with a 4x4 transformed kernel,
   and transformed back to a 2x2 output. A stride-2 4x4 DeConv uses a fast
   transposed-convolution algorithm, T3(6x6,4x4): a 5x5 input patch becomes
   an 8x8 transform-domain tile, and gives a 6x6 output block. The transform
   matrices hold only 0 and ±1, so the forward and inverse transforms are
   adders. One 8x8 tile has the same size as four 4x4 Winograd tiles, so a
   single array serves "one DeConv patch" or "four Conv patches" per beat.
2. **The transformed kernels are pruned to 50 %, structurally.** Every
   (output channel, input channel) pair keeps exactly 32 of its 64 DeConv
   weights, or 8 of its 16 Conv weights. They are stored with a 6-bit index.
   Each sparse compute unit therefore needs only 32 multipliers, and it picks
   its 32 operands out of the 64-element tile with the index.

On top of this, a *layer chain* Conv -> Conv -> DeConv runs row by row out
of a ten-bank Input Buffer. Intermediate rows never leave the chip.

The RTL is plain synthesizable SystemVerilog. Its defaults are the published
configuration:

- 12 input x 12 output channels in parallel (Pif = Pof = 12);
- 32 multipliers per compute unit, 4608 in all;
- 12-bit activations and 16-bit weights;
- a 10-bank Input Buffer.

## 1. Arithmetic

### Transforms

The output patch is V = Aᵀ [ M ⊙ (G W Gᵀ) ⊙ (Bᵀ X B) ] A, where M is the
pruning mask.

| | input X | Bᵀ | tile | Aᵀ | output V |
|---|---|---|---|---|---|
| Conv  | 4x4 | 4x4 | 4x4 | 2x4 | 2x2 |
| DeConv| 5x5 | 8x5 | 8x8 | 6x8 | 6x6 |

The DeConv output follows V[a][b] = Σ X[i][j] · W[a−2i+3][b−2j+3]. This is a
stride-2 transposed convolution, aligned so that a 5x5 input window gives the
6x6 block of its interior. G contains halves. The hardware therefore stores
the integer E = 4·G W Gᵀ, and the factor 4 is absorbed in the requantisation
shift. Computing E and pruning it happen offline; the design only receives
the non-zero values and their indices.

### Two-stage transform units

Each 2-D transform is a row pass followed by a column pass of the same 1-D
unit:

- **`pre1d`** implements both input transforms on 5 inputs, with 8 outputs.
  DeConv: o0 = i0−i2, o1 = i1+i2, o2 = i2−i1, o3 = i3−i1, o4 = i1−i3,
  o5 = i2+i3, o6 = i3−i2, o7 = i4−i2. In Conv mode i4 is forced to 0, and
  the four Winograd outputs appear on o0, o1, o2 and o4.
- **`post1d`** implements both output transforms on 8 inputs, with 6
  outputs: o0 = i0+i1+i2, o1 = i4+i5+i6, o2 = i1−i2−(Conv ? i3 : 0),
  o3 = i5−i6, o4 = i1+i2+i3, o5 = i5+i6+i7. The Conv results are on o0
  and o2.

Around these units:

- A **PreU** (`preu`) uses 16 row units and 16 column units. A data router
  between the two stages transposes rows into columns.
- A **PostU** (`postu`) uses 16 row units and 8 column units.

Transform-domain layout on the 64-element bus:

| mode | PreU output (tile) | PostU output (patch) |
|---|---|---|
| DeConv | `y[8i+j]` | `v[6a+b]` |
| Conv, patch p = 0..3 | `y[16p+4i+j]` | `v[4p+2a+b]` |

The four Conv patches are horizontally adjacent. They overlap by two columns
and together cover 4 rows x 10 columns.

### Widths

| quantity | bits |
|---|---|
| activation | 12 |
| weight | 16 |
| transformed input | 14 |
| product | 30 |
| psum accumulator | 40 |
| PostU output | 44 |

A result is requantised to 12 bits in three steps:

1. arithmetic shift right by a per-layer amount;
2. optional ReLU;
3. saturation.

## 2. The sparse compute array

An **SCU** (`scu`) holds 32 multipliers. Slot j multiplies `h[idx[j]]` by
`w[j]`, where h is the 64-element transformed input of one input channel.

The **united SCU array** (`scu_array`) has Pof rows and Pif columns of SCUs:

- Column c receives the tile of input channel c. Row r holds the weights of
  output channel r.
- In Conv mode each SCU uses only its first 8 weights. It replicates them to
  the four patches: slot 8p+j gets weight j and index 16p + idx[j].
- The products are registered.
- An adder tree then scatters each product to its transform-domain position
  and sums over the Pif input channels.
- A psum register file either loads the sum (first input-channel tile) or
  adds to it.

The array's output is valid two cycles after the beat of the last
input-channel tile.

## 3. One row operation: the SFTC

`sftc` is the datapath. `sftc_ctrl` sequences one *row operation*:

- a Conv pair, giving two output rows from four input rows; or
- a DeConv window, giving six output rows from five input rows.

Path through the datapath:

1. Input Buffer.
2. Column FIFO.
3. Pif PreUs.
4. SCU array, with the Weight and Index Buffers.
5. Pof PostUs.
6. Reshuffle Network and requantisation.
7. DEMUX.

The DEMUX sends Conv rows back into two Input Buffer banks and DeConv rows
into the six banks of the Output Buffer.

The controller walks the row in **groups**:

| | window | step | output columns |
|---|---|---|---|
| Conv | 10 input columns | 8 | 8 |
| DeConv | 5 input columns | 3 | 6 |

For each group it performs these steps:

1. **LOAD.** Read the new columns, all channel tiles, into the column FIFO,
   one column of 5 banks per cycle. Past the row end it pushes zeros.
2. For each output-channel tile:
   - **COMP.** One beat per input-channel tile.
   - **WAIT.** Wait for the reshuffled patch; the pipeline is PreU 1,
     array 2, PostU 1 and reshuffle 1 cycle.
   - **WRITE.** Write one output column per cycle. Columns past the valid
     width (Conv W−2, DeConv 2W−4) are dropped.
3. **POP.** Pop the step from the FIFO. The overlap columns stay in it.

The output-tile loop is inside the group loop. Because of that, a Conv may
write its results over the two banks that hold its own first two input rows:
every column it still needs is already in the FIFO.

Convolutions are *valid* (no padding). A chain on an input of HA x WA pixels
gives B of (HA−2) x (WA−2), C of (HA−4) x (WA−4) and D of
6·⌊(HA−6)/3⌋ rows x (2(WA−4)−4) columns.

## 4. Heterogeneous layer chaining

The feature maps of one chain are A -> B -> C -> D:

- Row i of A, B or C always lives in Input Buffer bank i mod 10.
- Conv pair p of B needs A rows 2p..2p+3; C is built from B in the same way.
- DeConv window q needs C rows 3q..3q+4 and produces D rows 6q..6q+5.
- A bank may be overwritten once every operation that reads its row has been
  issued.

`chain_sched` tracks what each bank holds. It cycles through four phases:

1. LOAD A rows;
2. Conv1;
3. Conv2;
4. DeConv, with the store of the D window.

In each phase it issues operations for as long as their inputs are present
and their target banks are free. With ten banks this reproduces the published
bank schedule exactly:

| step | operations |
|---|---|
| 0 | A0–A9 |
| 1 | B0–B7 |
| 2 | C0–C5, D0–D5 |
| 3 | A10–A12 |
| 4 | B8–B9 |
| 5 | C6–C7, D6–D11 |
| 6 | A13–A15 |
| 7 | B10–B13 |
| 8 | C8–C11 |

`top_ctrl` dispatches every operation either to the DMA (row loads, window
stores) or to the SFTC controller (Conv and DeConv). It runs one operation at
a time.

## 5. Programming and data formats

The control bus has 32-bit registers. Registers can be written only while the
accelerator is idle.

| addr | register |
|---|---|
| 0 | write 1 = start; read: bit0 busy, bit1 done, bit2 stalled (the scheduler found nothing to issue) |
| 1 / 2 | A_BASE / D_BASE (external word addresses) |
| 3 / 4 / 5 | WGT_BASE / IDX_BASE / COEF_WORDS |
| 6 / 7 | HA (rows of A; HA−4 must be 3k+2) / WA (≤ W_MAX) |
| 8, 9, 10 | layer Conv1, Conv2, DeConv: [3:0] input tiles, [7:4] output tiles, [15:8] coefficient-buffer base, [21:16] shift, [24] ReLU |
| 11 | bit0: send DeConv results to the DCC offset port instead of memory |

External memory is word addressed, with 256-bit words.

- **A row i** occupies the words at `A_BASE + i·WA·T + t·WA + col`.
- **Activation words** carry Pif 12-bit values in their low bits.
- **D window q** starts at `D_BASE + q·6·WD·T`. Inside it, word
  `(t·6 + r)·WD + col` holds row r of the window.
- **Coefficients.** A coefficient word k goes to buffer address k / (2·144),
  SCU lane (k/2) mod 144 (lane = out·Pif + in), half k mod 2. It carries
  sixteen 16-bit fields. The index words use the low 6 bits of each field.
  - Buffer address `base + ot·ict + ct` holds the step for output tile ot and
    input tile ct.
  - DeConv indices are 8i+j.
  - Conv indices are 4i+j in the first 8 slots.

## 6. Modules

| module | role |
|---|---|
| `nvca_pkg` | widths, enums, command structs, requantiser |
| `pre1d`, `post1d` | 1-D input / output transform units (shared Conv/DeConv) |
| `preu`, `postu` | 2-D transform units (one register stage each) |
| `scu`, `scu_array` | sparse multiply, adder tree, psum register file |
| `coef_buffer` | Weight Buffer (16 b) and Index Buffer (6 b), 27 words |
| `input_buffer`, `output_buffer`, `sram_bank` | 10-bank and 6-bank buffers, registered reads |
| `input_fifo` | 10-column window FIFO for all channel tiles |
| `reshuffle` | patch-to-row reorder and requantisation |
| `sftc`, `sftc_ctrl` | the core and its row-operation sequencer |
| `chain_sched`, `top_ctrl` | layer chaining, registers, dispatch |
| `dma_engine` | bus master, scatter to buffers, gather from the Output Buffer / DCC |
| `nvca_top` | everything above; DCC connections brought out as ports |

## 7. Simulating

Each block has a self-checking testbench in `tb/`. They compare against
integer reference models in `tb/nvca_ref_pkg.sv`: the transforms written from
the matrices, plus direct convolution. Each prints
`TB_RESULT checks=… failures=…`. Example:

```
verilator --binary --timing --assert -Wno-fatal rtl/nvca_pkg.sv tb/nvca_ref_pkg.sv \
  -y rtl -y tb tb/tb_nvca_top.sv --top-module tb_nvca_top -Mdir obj && obj/Vtb_nvca_top
```

- **`tb_nvca_top`** runs two complete chains at Pif = Pof = 2 with 4
  channels. It checks every word of D against a reference chain. It also
  counts the chain's mechanisms (bank reuse, Conv self-overwrite, mode
  switches, zero padding, bus stalls), and fails if any of them never
  occurs.
- **`tb_nvca_full`** does the same at the default parameters: 12 x 12 SCUs,
  36 channels, all 27 coefficient words, HA = 12, WA = 10. It passes with
  3468 checks. Because of the 4608-multiplier array, verilator needs about
  13 minutes of C++ compilation on one core; the simulation itself takes
  about 15 seconds.
- **`tb/ext_mem_model.sv`** is the external memory used by these tests. It
  has random stalls and latencies.

## 8. Departures and limits

- **Deformable Convolution Core.** It is not built: the published design
  takes it from earlier work and does not describe it. Its input, offset and
  output streams are ports of `nvca_top`. The attention, pooling and residual
  operations of the network have no described hardware either, so they are
  absent.
- **Buffer sizes are this design's own.** The published total is 373 KB. The
  defaults here (Input Buffer 64 columns x 6 tiles per bank, Output Buffer
  128 x 6, 27-word coefficient buffers) add up to about 486 KB.
- **Row width.** Rows wider than 64 pixels, such as the 120 to 960 pixel rows
  of 1080p frames at 1/16 to 1/2 scale, must be split into strips by the
  host.
- **Throughput.** The sequencing is simple. Load, compute and write do not
  overlap, and the DMA keeps one bus request in flight. The design computes
  the published arithmetic but not at the published 3525 GOPS.
- **Choices the source leaves open.** These are all choices of this design:
  - valid (unpadded) convolutions;
  - the requantisation step;
  - the register map;
  - the bus protocol;
  - the FIFO reuse of overlap columns;
  - the phase rule of the scheduler.
