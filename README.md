# A pattern-pruned RRAM convolution unit with kernel reordering

An RRAM crossbar computes a matrix-vector product in one step. Each cell holds a
weight, each wordline carries an input activation, and each bitline sums
activation × weight over its rows. In the usual mapping every 3×3 filter of a
convolution layer takes one column, with nine rows per input channel. A weight
that pruning set to zero still takes its cell. Fine-grained pruning removes 80–90 %
of the weights of a CNN such as VGG16, but a zero can only be dropped when its
whole row or column is zero. So the crossbar area stays the same.

This design uses *pattern pruning*. After pruning, every 3×3 kernel of a layer
has one of a handful of non-zero shapes (patterns): 2 to 12 per layer in the
networks this scheme targets, one of them the all-zero pattern. The layer is then
mapped in four steps, separately for each input channel:

1. **Reorder.** Gather the kernels that share a pattern, whatever output
   channels they belong to.
2. **Compress.** Drop the zero positions. Kernels with the same pattern now
   form a dense *pattern block*. Its height is the pattern size (the number of
   non-zero positions). Its width is the number of kernels in it. All kernels in
   a block use the same input activations on the same rows, so the block can
   still be computed in parallel.
3. **Place.** Pack the blocks into the crossbar by a fixed rule (below).
4. **Index.** For each block, record its pattern and the output channel of
   each of its kernels.

All-zero kernels are neither stored nor computed.

The RTL here is one *computing unit* (CU) that runs a layer mapped this way.
Its control unit works out where every block sits in the crossbar from the
index tables alone. It drives the crossbar one *operation unit* (OU) at a time:
at most 9 wordlines × 8 bitlines per cycle, the limit that ADC resources and
cell variation place on real arrays. It skips blocks whose inputs are all zero.
It also puts the bitline results, which come out in reordered order, back into
output-channel order.

## Placing pattern blocks

The rule matters because the hardware never stores positions. The mapping
software and the control unit apply the same rule, and they must agree
exactly.

Within one input channel, the blocks are taken in order of decreasing pattern
size (blocks of equal size keep their stored order).

* The first block goes to the top-left corner of the channel's *region*. Its
  height sets the region height.
* For each next block, compare the rows left below the current block
  (`region height − (current row + current height)`) with the new block's size:
  * if enough rows are left, the block goes **directly below the current block,
    aligned to its left edge**;
  * otherwise it starts **new columns**, to the right of every column used so
    far in this region, aligned to the top.
* The "current block" is always the one placed last.

Example, with blocks of size × width A 4×5, B 3×4, C 2×5, D 1×6 and E 1×3:

```
col:  0....4 5..8 9...........14
row0  AAAAA BBBB CCCCC
row1  AAAAA BBBB CCCCC
row2  AAAAA BBBB DDDDDD
row3  AAAAA .... EEE...
```

B has no room below A (0 rows left), so it starts new columns. C has no room
below B (1 row left, C needs 2), so it starts new columns again. D fits below C,
and E fits below D. With a 4×4 OU, this region is computed as 8 OUs:
A in 4+1 columns, B in 4, C in 4+1, D in 4+2 and E in 3. `tb_control_unit`
checks this exact sequence.

The regions of successive input channels are stacked downwards. Each region is
as tall as its largest pattern, at most 9 rows. A 512-row crossbar therefore
holds at least 56 channel regions. The widest region a layer can produce is its
number of output channels, so 512 columns are always enough for one channel.

An OU never crosses a block edge. Rows of different blocks multiply different
activations, and columns of different blocks belong to different kernels. A
9-row OU always covers a block's full height (3×3 kernels have at most 9
non-zeros), so blocks are only cut into column steps of 8. If `OU_ROWS` is set
below the pattern size, the control unit also cuts blocks into row steps and
accumulates them.

## Index tables

`weight_index_buffer` holds three tables, all filled in mapping order:

| table | one entry per | contents |
|---|---|---|
| channel table | input channel | number of stored (non-zero) patterns, 4 bits |
| pattern table | pattern block | 9-bit pattern mask, size (4 bits), kernel count (10 bits) |
| index table | stored kernel | output channel, 9 bits |

The control unit reads them strictly in sequence. It keeps a pattern pointer and
an index pointer, which both run on across channels. The kernel in column `k`
of a block has its output channel at `index_pointer + k`. The mask serves two
purposes: it tells the input preprocessing unit which activations to select, and
its population count is the block height.

## Computing one output position

The host loads the nine activations of every input channel into
`input_register` and pulses `start`. The CU then:

1. Clears the output register.
2. For each channel, reads the channel table (1 cycle). A channel with no
   stored pattern costs nothing more.
3. For each block, reads the pattern entry and computes the block's place
   (1 cycle). `input_preprocessing_unit` selects the activations at the mask's
   positions and packs them in position order. These are the inputs for rows 0,
   1, … of the block. If they are all zero, the block is skipped and only the
   pointers advance.
4. Otherwise the CU issues the block's OUs, one per cycle.
   `wordline_decoder` drives the OU's rows with the packed activations, and
   `bitline_decoder` routes its columns to the 8 ADC lanes.
5. The `rram_crossbar` model forms each lane's column sum, and its
   sample-and-hold registers the sums (1st clock edge). `adc` converts them to
   8-bit codes (2nd edge). `output_indexing_unit` looks up each lane's output
   channel, and `output_accumulator` adds each code into that channel's word
   (3rd edge).
6. After the last channel, it waits 2 cycles for the pipeline to drain. Then it
   reads `num_oc` words, one per cycle, through `relu_unit` and
   `pooling_unit` to `out_valid/out_oc/out_data`, and pulses `done`.

Counted from the clock edge that samples `start` to the edge on which `done` is
seen high, a window takes

```
(num_ch + 1) + blocks + OUs + 2 + num_oc + 1   cycles
```

Here "blocks" counts every stored pattern block, skipped or not, and "OUs" only
those of blocks that were not skipped. The `ou_count` output counts OUs issued
and `skip_count` counts skipped blocks. `newcol_count` and `below_count` count
the two placement decisions.

Each output channel receives exactly one ADC code per input channel in which
its kernel is non-zero. That code is the dot product of the kernel with the
window, quantised by the ADC. So the result is

```
out[oc] = pool( ReLU( Σ_ch  ADC( Σ_k x[ch][k] · w[oc][ch][k] ) ) )
```

and it does not depend on how the blocks were placed. The testbenches compute
the expected values with this formula from the unmapped kernels.

**Pooling.** With `pool_en` set, the control unit counts windows. It marks the
first and last window of every group of `POOL_WIN` = 4 consecutive windows.
`pooling_unit` keeps a running maximum per output channel and emits results
only after the last window of a group. The host must therefore send the four
positions of each 2×2 pooling window back to back. With `pool_en` clear, every
window is emitted as it is.

## Number formats

| quantity | format | basis |
|---|---|---|
| activation | unsigned 4 bits | 4-bit DAC |
| weight | signed 4 bits, one crossbar cell | 4 bits per cell |
| column sum | signed 12 bits | 9 × 15 × (−8) = −1080 |
| ADC code | signed 8 bits, `sat(sum >>> 3)` | 8-bit ADC, shift chosen to fit a 9-row sum |
| accumulator / output | signed 20 bits | 512 channels × 8-bit codes |

## Interface of `pp_rram_accel`

* **Programming** (before computing, one item per cycle): `xb_we/xb_row/xb_col/xb_data`
  writes one crossbar cell. `ch_*`, `pat_*` and `oc_*` write the three index
  tables.
* **Layer setup:** `num_ch` (input channels), `num_oc` (output channels read
  out), `pool_en`.
* **Per window:** write each channel's nine activations with
  `in_we/in_ch/in_win`, then pulse `start`. `busy` is high until the window
  ends. Results arrive on `out_valid/out_oc/out_data` in output-channel order,
  and `done` pulses after the last one.
* Reset `rst_n` is asynchronous and active low. It resets control, pipeline
  tags and accumulators. Crossbar cells and tables have no reset.

Defaults: 512×512 crossbar, 9×8 OU, 512 input channels, 512 output channels,
8192 pattern entries and 262,144 output-channel indexes. The last figure allows
one index per crossbar cell, the worst case.

## Files

| file | block |
|---|---|
| `rtl/rram_pkg.sv` | widths, number formats, `pattern_entry_t`, `ou_cmd_t` |
| `rtl/pp_rram_accel.sv` | the CU, top level |
| `rtl/control_unit.sv` | channel/block walk, placement recovery, OU issue, skip, read-out, pooling marks |
| `rtl/weight_index_buffer.sv` | channel, pattern and index tables |
| `rtl/input_register.sv` | per-channel 3×3 windows |
| `rtl/input_preprocessing_unit.sv` | pattern-driven input selection and all-zero detection |
| `rtl/wordline_decoder.sv`, `rtl/bitline_decoder.sv` | OU row/column activation, lane routing |
| `rtl/rram_crossbar.sv` | behavioural model: array, DACs, sample-and-hold |
| `rtl/adc.sv` | behavioural model: 8-bit ADC |
| `rtl/output_indexing_unit.sv` | lane → output channel through the index table |
| `rtl/output_accumulator.sv` | add and output register |
| `rtl/relu_unit.sv`, `rtl/pooling_unit.sv` | ReLU, 2×2 max pooling |

`rram_crossbar` and `adc` stand for analog circuits. They are ideal integer
models: no conductance spread, noise or IR drop. They lint and simulate like
the rest, but they are not meant for synthesis as logic.

## What follows the source scheme and what is this design's own

Taken from the scheme:
* the mapping steps;
* the placement rule and its recovery from the indexes;
* OUs kept inside pattern blocks, with a 9×8 OU size;
* a 512×512 crossbar with 4-bit cells, a 4-bit DAC and an 8-bit ADC;
* pattern-driven input selection with all-zero skipping;
* indexes stored pattern by pattern, with 9-bit output-channel indexes;
* output reordering through those indexes;
* an accumulating output register, then ReLU and pooling.

Chosen here, because the scheme leaves it open:
* the split of the index buffer into three tables;
* vertical stacking of channel regions;
* signed weights in single cells;
* the ADC transfer function;
* all cycle timing (one cycle per table read, one OU per cycle, a 3-edge pipeline);
* max pooling by running maximum over consecutive windows;
* the host interface.

Departures and limits:
* **One cell per weight.** The source counts model size at 16 bits per weight
  but gives 4 bits per cell and draws one weight per cell. Here a weight is one
  4-bit cell. Splitting wider weights over several cells, with shift-and-add of
  their results, is not built.
* **One CU.** A whole VGG16 needs many crossbars. Even at 86 % sparsity its 14.7M
  convolution weights leave about 2.06M non-zeros, against 262,144 cells in one
  CU. How CUs are replicated and share work is not specified, so it is not
  built. A single CU runs any layer slice whose placed blocks fit its crossbar,
  with up to 15 stored patterns per channel and up to 512 input and output
  channels.
* **No feature-map buffer.** The on-chip feature-map buffer and the
  window-cutting (im2col) addressing are outside this RTL. The host loads
  windows directly.
* **No requantisation.** ReLU outputs are not requantised to 4-bit activations
  for a next layer.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops with a watchdog if it hangs. With
Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/rram_pkg.sv tb/tb_pp_rram_accel.sv \
          --top-module tb_pp_rram_accel -Mdir obj && obj/Vtb_pp_rram_accel
```

Replace the testbench name to run another. `tb_pp_rram_accel` runs the CU at
its full default size, in about a second of wall time:

* It builds a random pattern-pruned layer: 24 input channels, 64 output
  channels, a library of 6 patterns plus all-zero, one channel entirely zero,
  and one block wider than an OU.
* It maps the layer with its own implementation of the scheme and programs the
  CU.
* It runs four pooled windows and one unpooled window, with inputs 40 % zero.
* It checks every output value, the OU count, the skip count, the placement
  decisions and the cycle count against the formula above.
* It checks that each mechanism occurred: all-zero skip, below and new-column
  placement, multi-OU blocks, an empty channel, and pooling on and off.

Both `tb_pp_rram_accel` and `tb_vgg16_layer_slices` use the harness
`tb/pp_layer_tester.sv`. `tb_vgg16_layer_slices` runs three VGG16 layer slices
side by side (about 20 s). Each slice has 128 input channels and 256 output
channels. The slices use 8, 8 and 12 patterns and 41 %, 27 % and 29 % all-zero
kernels, which are the pattern counts and zero-kernel shares reported for
pattern-pruned VGG16 on CIFAR-10, CIFAR-100 and ImageNet. Weight sparsity comes
out at about 84–87 %.

`tb_control_unit` checks the exact OU sequence of the placement example above,
with a 4×4 OU, as well as row-step splitting and skipping. The other
testbenches check each block against a reference model.

Assertions check that the lanes of one OU write distinct output channels, that
the ADC lanes match the output-indexing writes, and that an OU stays inside the
crossbar rows.
