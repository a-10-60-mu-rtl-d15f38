# Sparse, mixed-bit-width 1D-CNN accelerator for ventricular-arrhythmia detection

An implantable cardioverter-defibrillator has to decide, from a short intracardiac
electrogram (IEGM), whether the heart is in a life-threatening ventricular
arrhythmia, using only microwatts. This design runs a small, pruned and quantised
one-dimensional convolutional network for that decision. It gets its efficiency
from three ideas:

* **Sparse weights, shared scratch pad.** The compiler prunes about half of the
  weights. A group of 16 PEs shares one small scratch pad of 16 activations. Each
  PE receives only its non-zero weights, each with the index of the scratch-pad
  register it applies to, and picks that activation through a multiplexer. Zero
  weights are never fetched or multiplied, and no PE needs its own operand store.
* **Lock-step array.** All 512 PEs take one (weight, index) entry per cycle,
  read straight from the weight and index memories. The compiler pads the entry
  lists so that every PE has the same number. There are no FIFOs and no per-PE
  handshakes; one controller drives every PE.
* **Bit-width-reconfigurable multiplier (CMUL).** An 8-bit weight word can hold
  one 8-bit weight, two 4-bit weights, four 2-bit weights or eight 1-bit weights.
  The multiplier's shift-add tree is set to one of these modes, so narrower
  weights give more multiply-accumulates per cycle.

The SystemVerilog here is a complete, simulating implementation of the digital
part of such a chip: PE array, buffers, controller and data mover. The published
description gives the block structure, the array sizes and the insides of the
SPE and of the multiplier. Every other detail is a choice made here, and the text
below says which is which.

## 1. The PE array: N × W × H × M = 2 × 4 × 4 × 16

| dimension | meaning | size | RTL |
|---|---|---|---|
| N | input-channel slices (core elements per computing core) | 2 | `N_CE` |
| W | output-map width (computing cores) | 4 | `W_CC` |
| H | output-map height (SPEs per core element) | 4 | `H_SPE` |
| M | output channels (PEs per SPE; 12 PEs + 4 MPEs) | 16 | `M_PE`, `N_MPE` |

`cnn_accel_top` → 4 × `computing_core` → 2 × `core_element` → 4 × `spe` → 12 × `pe`
and 4 × `mpe`, each with one `cmul`. That gives 512 multipliers.

For a 1D network the W × H = 16 SPEs of one core-element slice compute 16
neighbouring output samples ("pixels") of the same 16 output channels. So all of
them use the same weights. The two core elements of a computing core work on
different parts of the receptive field (different input channels or taps). The
computing core adds their partial sums.

## 2. Inside an SPE (`spad`, `spe`)

The scratch pad (`spad`) holds 16 signed 8-bit registers in four groups of four.
An `IN` word is 32 bits: the four channels of one channel group at one position.
Each shift writes the word into group 0 and moves every group down by one.
Register `g*4 + e` is channel `e` of the word in group `g`. The controller shifts
the words of a chunk in last-first, so after four shifts group `g` holds word `g`
of the chunk.

Each PE has two 16-to-1 select multiplexers, driven by the 4-bit indices `sel0`
and `sel1` of its current entry. They feed the multiplier's two activation
inputs, A0 and A1. In 8-bit mode only `sel0` matters.

An entry (`wentry_t`) is `{w[7:0], sel1[3:0], sel0[3:0]}`.

## 3. The mixed-bit multiplier (`cmul`)

This is the least obvious block. Each weight bit `i` has:

1. an operand multiplexer that picks A0 or A1 (`asel[i]`);
2. a gating MUX that passes that activation when `w[i] = 1` and 0 otherwise.
   The activation is negated when bit `i` is the most significant bit of its
   weight segment, so the weights are two's complement.

Three adder levels follow. Before each adder, a multiplexer either shifts the
upper operand left (by 1, 2 and then 4) or passes it unshifted:

| mode | shift at level 1 / 2 / 3 | result |
|---|---|---|
| `BW8` | <<1 / <<2 / <<4 | `w[7:0]·A` |
| `BW4` | <<1 / <<2 / none | `w[3:0]·A_lo + w[7:4]·A_hi` |
| `BW2` | <<1 / none / none | sum of four 2-bit weights × their activations |
| `BW1` | none / none / none | sum of eight 1-bit weights × their activations |

A shift joins two halves into one wider weight. No shift keeps them as separate
weights and adds their products, so one step is a small dot product. Which
activation goes with which segment is set by `asel`; in the tests, 4-bit mode
uses `asel = 8'hF0`, which pairs the low nibble with A0 and the high nibble with
A1. Because the weights are two's complement, a 1-bit weight is 0 or −1.

The multiplier has four register stages: after the gating MUXes and after each
adder level. Its latency is 4 cycles, it accepts a new operand pair every cycle,
and the mode travels down the pipeline with the data. The result is 16 bits.

## 4. PE and mixed PE (`pe`, `mpe`)

A PE is CMUL → adder → 24-bit accumulator register, with the register fed back
into the adder. An entry marked `first` starts a new sum. A product enters the
accumulator 5 cycles after its entry.

An MPE adds two pooling paths that take the selected activation A0 directly:

* **P-CMP:** a running maximum.
* **P-ADD:** a running sum. SFT_ADD turns it into an average by an arithmetic
  right shift of `pool_shift`.

An output MUX picks the convolution sum, the maximum or the average. The
pooling registers update one cycle after the entry.

In a pooling layer, MPE `j` of a pass produces channel `j` of one channel
group. Its entries point at register `k*4 + j` for window taps `k = 0..3`.

## 5. How a layer is run (`top_controller`)

The controller holds up to 8 layer descriptors (`layer_desc_t`). It runs them one
after the other, in place in the activation buffer.

**Data layout.** An activation word holds four channels. A feature map of `G`
channel groups is stored position-major: word `(p, g)` is at `base + p*G + g`.
The single-lead input is stored with its channel padded to four, so `G = 1`.

**Receptive field.** For output pixel `p`, word `j` of the receptive field is:

* convolution: tap `k = j / G`, group `g = j % G`;
* pooling: tap `k = j`, group `g` = the current pass.

It is read from `in_base + (p*stride + k)*G + g`. The layer has no edge padding,
so `l_out = (l_in − kernel)/stride + 1`.

**Loops.** For each output pass (16 output channels for convolution, one channel
group for pooling), for each tile of 16 pixels (pixel `tile*16 + w*4 + h` goes
to computing core `w`, SPE `h`), and for each round:

* *LOAD*, 128 cycles: every one of the 32 SPads gets its four words, one word
  per cycle. Core element `n` takes receptive-field words `(round*2 + n)*4 … +3`.
  Words past the receptive field, or for pixels past `l_out`, are loaded as
  zero. This zero-fills the unused parts of the array.
* *COMPUTE*, `nnz` cycles: the weight/index row
  `wgt_base + (pass*rounds + round)*nnz + e` is read for each step `e`. The row
  gives all 32 (core element, PE) entries for that cycle.

After the last round the controller waits 7 cycles for the pipelines to drain.
It then writes back: each 24-bit sum is shifted right by `out_shift`, clamped at
zero if `relu` is set, saturated to int8, and packed four channels to a word.
Pixels past `l_out` are not written. Cycles per tile:
`rounds*(128 + 1 + nnz) + 7 + (64 or 16 write-back cycles) + 1`.

**What the compiler must produce** (the end-to-end testbench contains such a
compiler):

* For each pass, round, core element and PE, a list of the non-zero weights that
  fall into that core element's 16-register chunk. Each weight goes with its
  register index.
* In 4-bit mode, pairs of weights packed into one entry.
* Every list of a layer padded with zero-weight entries to a common length
  `nnz`.
* The `rounds` field: `ceil(receptive_field_words / 8)`.
* Weight row layout: the entry of core element `n`, PE `m` is byte
  `n*16 + m` of both the weight row and the index row (index byte = `{sel1, sel0}`).

### Layer descriptor fields

| field | meaning |
|---|---|
| `pool`, `op` | pooling layer; `OP_MAX` / `OP_AVG` (convolution uses `OP_CONV`) |
| `mode`, `asel` | weight bit width and A0/A1 select per weight bit |
| `in_base`, `out_base` | activation-buffer word addresses of the input and output maps |
| `wgt_base` | first weight/index row of the layer |
| `l_out`, `stride`, `kernel` | output length, stride, kernel (window) length |
| `in_groups`, `out_passes` | input channels / 4; output channels / 16 (pooling: channel groups) |
| `rounds`, `nnz` | chunk rounds per pixel; entries per PE per round (1…16) |
| `out_shift`, `relu`, `pool_shift` | requantisation shift, ReLU, average-pool shift |

## 6. Memories and the host side

* `act_buffer`: the ifmap/ofmap buffer. 16384 × 32 bits (64 KiB), one read port
  and one write port, 1-cycle read latency.
* `weight_index_buffer`: the weight and index memories. 2048 rows of 256 bits
  each. It is read one row per cycle and written in 32-bit slices
  (`waddr = row*8 + slice`).
* `data_mover`: the download/upload unit. A command (`dm_cmd_t`) copies `len`
  words between DDR and one of the three memories. Uploads come only from the
  activation buffer. It talks to the DDR controller through a simple word port:
  `ddr_req`/`ddr_gnt` request and grant, `ddr_we`, `ddr_addr`, `ddr_wdata`, and
  in-order `ddr_rvalid`/`ddr_rdata`. Read latency can be any number of cycles.
* Host sequence:
  1. Download the input, the weight rows and the index rows.
  2. Write the descriptors.
  3. Pulse `start` with `num_layers` and wait for `done`.
  4. Upload the output map.

  While `busy` is high the controller owns the activation buffer. Issuing data
  mover commands then is an error, and an assertion catches it.
* Not included: the PLL (the clock comes in on `clk`) and the DDR controller with
  its PHY. That interface is the `ddr_*` ports of `cnn_accel_top`.
  `tb/ddr_model.sv` is a behavioural stand-in for the DDR controller and the
  memory behind it.

## 7. Departures from the published design and open points

What follows the published description:

* the block set;
* the 2 × 4 × 4 × 16 array with 12 PEs and 4 MPEs per SPE;
* the 16-register scratch pad in four groups, shared by all PEs of an SPE;
* per-PE select multiplexers driven by stored indices;
* weights and indices read directly from the buffers, with no FIFOs;
* lock-step operation of all PEs;
* the PE (CMUL, adder and accumulator register) and MPE (P-CMP, P-ADD, SFT_ADD,
  output MUX) datapaths;
* the CMUL's bit-level operand muxes, gating MUXes, the <<1/<<2/<<4 tree and its
  four register stages;
* 8/4/2/1-bit weights and 8-bit activations;
* zero-filling of unused array parts.

Choices made here:

* **Two select MUXes per PE.** The SPE drawing shows one multiplexer per PE, but
  the multiplier has two activation inputs (A0, A1). A second index feeds A1.
* **Sign handling in the CMUL.** The segment MSB is negated (two's complement);
  the published drawing shows no sign logic.
* **Interpretation of the unshifted tree paths** as sums of separate products
  (section 3).
* **SPad loading one word per cycle** from a single 32-bit buffer port. This is
  simple, but loading dominates the run time: 128 cycles per round against
  typically 4–13 compute cycles. The published figures (35 µs per recording at
  400 MHz, about 14000 cycles, and 150 GOPS) imply a wider load path. The
  8-layer test network takes 22511 cycles, or 56 µs at 400 MHz.
* **Reading of "N is padded to 4".** The published demonstration pads N to 4
  although N = 2 in the fabricated array. Here this is read as padding the
  single input channel to the four channels of one `IN` word.
* **All four computing cores in use.** The published demonstration engages only
  one computing core (128 PEs) and pads the rest with zeros. Here all four work
  on neighbouring pixels; the results are the same.
* **Descriptor format, loop order, requantisation** (shift, ReLU, int8
  saturation), **buffer sizes, the DDR user port and the data mover** are all
  own choices. The source gives no layer shapes, widths or sizes for these.
* **Accumulator width** of 24 bits.

Not built:

* **Two-dimensional convolution.** It is mentioned as supported, but not
  described, and the controller only walks one dimension.
* **Layer shapes of the original network.** The published network (8 layers,
  512-sample input) is not specified, so it cannot be reproduced. The tests use
  an 8-layer network of their own (see below).

## 8. Simulation

All files are IEEE 1800-2017. `rtl/cnn_pkg.sv` must come first. With
Verilator 5:

```
verilator --binary --timing --assert rtl/cnn_pkg.sv rtl/*.sv tb/ddr_model.sv \
          tb/tb_cnn_accel_top.sv --top-module tb_cnn_accel_top -Mdir obj
./obj/Vtb_cnn_accel_top
```

Every testbench prints `TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_cmul` | all four modes, random operands and selects, exact 4-cycle latency |
| `tb_pe`, `tb_mpe` | accumulation with restarts, max/average pooling, 5- and 1-cycle latencies |
| `tb_spad` | the shift behaviour of all 16 registers |
| `tb_spe`, `tb_core_element`, `tb_computing_core` | sparse MACs over SPad contents, 8- and 4-bit modes, pooling, partial-sum addition |
| `tb_act_buffer`, `tb_weight_index_buffer` | memory contents and row/entry layout |
| `tb_data_mover` | downloads to all three memories and an upload, with random DDR grant and latency |
| `tb_top_controller` | every SPad load (target and word), weight-row address, write-back address and value, and the cycle count |
| `tb_cnn_accel_top` | end to end at the default sizes (see below) |

The end-to-end test runs this 8-layer network on a random 512-sample input. The
layer count matches the published network; the shapes are the test's own.

| layer | operation | kernel / stride | channels | weights | length |
|---|---|---|---|---|---|
| L0 | conv | 5 / 1 | 1 (padded to 4) → 16 | 8-bit | 512 → 508 |
| L1 | max pool | 4 / 4 | 16 | – | 508 → 127 |
| L2 | conv | 3 / 1 | 16 → 32 | 4-bit | 127 → 125 |
| L3 | max pool | 4 / 4 | 32 | – | 125 → 31 |
| L4 | conv | 3 / 2 | 32 → 32 | 8-bit | 31 → 15 |
| L5 | average pool | 4 / 4 | 32 | – | 15 → 3 |
| L6 | conv | 3 / 1 | 32 → 16 | 4-bit | 3 → 1 |
| L7 | conv | 1 / 1 | 16 → 16 | 8-bit | 1 → 1 (class scores) |

About half the weights are zero. The test:

* compiles the sparse weights itself;
* checks every output word of every layer against a direct dense reference;
* uploads the result to DDR and checks it there;
* checks the run time against the cycle formula;
* requires each of these to have occurred at least once: 8-bit and 4-bit MACs,
  max and average pooling, multi-round accumulation, zero-filled SPad words,
  skipped write-back of a partial tile, several output passes, ReLU clamping and
  int8 saturation.

It runs in about a second.

Parameters: the array sizes and word widths are package constants in `cnn_pkg`.
The buffer depths are parameters of `cnn_accel_top` (`ACT_DEPTH`, `WIB_ROWS`).
