# Column-combined sparse CNN on a bit-serial systolic array

A pruned convolutional layer has a sparse filter matrix. Put on a systolic array as it is, most cells
would hold a zero weight. *Column combining* packs the matrix before it reaches hardware. Input
channels (the columns of the filter matrix) are grouped so that within a group, at most one
channel has a nonzero weight in each filter row. The group is then merged into one column. Each
cell of a combined column keeps one weight plus the index of the channel that weight belongs to.
The cell receives the data of every channel in its group and multiplies its weight only with the
channel it was told to pick.

A 32×32 array then does the work of a far wider array. Any conflicts left over from packing are
removed during training, so the packed matrix is exact.

The layers are *shift convolutions*: a spatial shift of each input channel, then a 1×1
convolution. The only spatial operation is moving a whole channel by one pixel, with zeros shifted
in at the edges. That move is done while data is read out of memory, so the array only ever sees a
matrix multiplication.

This RTL implements the datapath of one such layer tile:

```
weight buffer ──load chains──► ROWS × COLS array of multiplexed (MX) cells ──► per row:
input buffer ─► shift block ─► group router ─► input skew ─┘          ReLU ─► quantizer ─► output buffer
```

Everything inside the array is bit-serial. Data is 8-bit unsigned and weights are 8-bit two's
complement. Accumulations are 32-bit two's complement and travel least-significant bit first.

## Numbers at default parameters

| parameter | default | meaning |
|---|---|---|
| `ROWS` | 32 | filters (output channels) held at once |
| `COLS` | 32 | combined columns |
| `ALPHA` | 8 | channels multiplexed into one column (package constant) |
| `IL` | 4 | interleaved data streams per cell (package constant) |
| `NCH` | `COLS*ALPHA` = 256 | input channels = input-buffer banks |
| `DEPTH` | 1024 | pixels per channel map (32×32) |
| `WB_DEPTH` | 512 | packed rows in the weight buffer (16 tiles of 32 rows) |

In one operation, the array applies a packed matrix of up to 32 filters × 32 combined columns (at
most 256 input channels) to every pixel of a map of up to 1024 pixels. Each cell uses one weight
per pixel. Every 32 clocks, each cell finishes four multiply-accumulates, one per stream.

## The bit-serial multiply-accumulate

`bitserial_mac` is the arithmetic core. The weight is split into a sign and a magnitude `|w|`.

- **Multiply.** The input arrives one bit per clock, LSB first, over 8 clocks. Each bit is ANDed
  with the 8 bits of `|w|` into a ripple of serial adders. The chain's lowest stage shifts one
  product bit out each clock, so the product of `x·|w|` leaves serially, LSB first. After the 8
  input bits, zeros are fed in to flush the high product bits.
- **Sign.** When the weight is negative, the product is negated serially as `~p + 1`: bits are
  inverted and passed through a one-bit serial incrementer. Its carry is set to 1 at the start of
  each word. A multiplexer picks the plain or negated stream by the weight's sign. The negated
  stream sign-extends correctly: once the product bits are exhausted it outputs ones until the
  32-bit word ends.
- **Accumulate.** A serial full adder adds that stream to the incoming accumulation bit `y_in`.
  The sum leaves on the next clock as `y_out`.

One word is 32 clocks. A `start` pulse marks bit 0 of a word. It clears every carry (sets the
incrementer carry) and captures the weight, so a new weight applies from that word on. Latency
from `y_in` to `y_out` is one clock, which makes the partial sums of a row flow one cell per clock.

## Interleaving: why there are four MACs per cell

An 8-bit input occupies its wire for 8 clocks, but a 32-bit accumulation needs 32 clocks to pass
through a MAC. With one MAC per cell, the input wires would be idle three quarters of the time.
Each cell therefore has `IL = 4` MACs and four accumulation lanes `y[0..3]`. The input wires carry
four different pixels in turn within each 32-clock *group*:

```
phase (clock within group)   0 ......... 7 | 8 ........ 15 | 16 ....... 23 | 24 ....... 31
input wires carry            pixel 4g+0    | pixel 4g+1    | pixel 4g+2    | pixel 4g+3
MAC j word starts at phase   0             | 8             | 16            | 24
```

MAC `j` takes the input only during its own 8-clock slot (phases `8j..8j+7`) and sees zero for the
other 24 clocks. Its 32-bit word starts at phase `8j`, so the four accumulation words are staggered
by 8 clocks. The four lanes of a row carry four pixels, and every wire is busy on every clock.
Pixel `p` of a map is stream `p mod 4` of group `p div 4`.

## The MX cell: multiplexing channels

`mx_cell` receives the `ALPHA = 8` channel wires of its combined column from the cell below and
passes them up through registers. Its weight entry (`wentry_t`) holds the 8-bit weight and a 3-bit
channel selector. The selector drives an 8:1 multiplexer, and the chosen bit feeds all four MACs.
A column whose group has fewer than 8 channels simply has idle wires.

The cell keeps two weight entries. The *active* entry is used for computation. The *shadow* entry
belongs to a load chain that runs up the column. While the array computes with the active
weights, the next tile's weights can be shifted into the shadow registers (`wl_en`). Each cell
passes its shadow entry to the cell above. A `commit` flag moves a shadow entry into the active
register. It travels in the sideband at phase 0, so every cell switches exactly when the first
pixel of the new tile reaches it. Each MAC latches the active weight at its own word start, so
words already in flight finish with the old weight.

The sideband `xside_t` moves up the column in step with the data and holds:

- `phase`: the clock within the 32-clock group;
- `valid`: the slot carries a real pixel;
- `commit`;
- `run`.

Because the sideband is delayed exactly like the data, cells need no counter of their own: each
one knows the phase of the bits it is seeing, whatever its position in the array.

## The array and its skew

`mx_array` is a `ROWS × COLS` grid. Data and sideband move up one row per clock. Partial sums move
one column per clock to the right, starting from `y_in` on the left edge (tied to zero in the
system) and leaving at the right edge as `y_out`. For a result to meet the right data, column `c`
must see a pixel `c` clocks later than column 0. The system therefore delays column `c`'s channel
wires and sideband by `c` registers before the array. Row `r` sees a pixel `r` clocks after row 0,
and its accumulation needs `COLS` clocks to cross. So the first result bit of row `r` leaves
`r + COLS` clocks after that pixel entered column 0. `ys_out[r]` is the sideband aligned with
`y_out[r]`, and tells the row's output stage where words begin and which are valid.

## Shift block

`shift_block` sits between the input buffer and the array. It has one memory controller per input
channel. For pixel `(h, w)`, channel `m` with shift `dir[m] = (dy, dx)` needs `in(h+dy, w+dx)`,
where `dy, dx ∈ {-1, 0, +1}`. The controller computes that address from the pixel address and the
map width. If the source lies outside the map, it raises a zero flag in place of reading. Each
channel has two 8-bit registers used as a double buffer:

- while one register shifts its bits out to the array over an 8-clock slot, the other is loaded
  with the next pixel's value;
- `swap` exchanges them at the end of the slot.

The input buffer has one bank per channel, and each controller reads only its own bank, so all
256 reads happen in parallel without conflicts. Reads are synchronous. The value is captured one
clock after `fetch`.

## Group router and row permutation

The input buffer holds the channels in *group order*. The channels that are combined into column
0 come first, then those of column 1, and so on. Each group is contiguous. The previous layer can
produce its outputs in this order by permuting its filter rows to match, so no crossbar is needed.
`group_router` only needs the size of each group: column `c` takes channels `first[c] ..
first[c] + grp_size[c] - 1`, where `first` is the running sum of the sizes before it. Lane `k` of
column `c` is that group's `k`-th channel, or 0 past the group's end. A weight's channel selector
is its channel's position inside the group.

## ReLU and quantizer

Each of the `ROWS × IL` result streams has its own `relu_serial` and `quantizer`.

A bit-serial ReLU cannot decide anything until the sign arrives in bit 31 (the word's last bit).
`relu_serial` therefore delays every word in a 32-stage shift register. When the word's last bit
enters, it samples the sign. A multiplexer then releases either the stored word or 32 zeros. The
latency is 32 clocks.

`quantizer` gathers the ReLU output into a 32-bit word. It shifts the word right by `qshift` and
saturates the result to `0..255`, giving the 8-bit input of the next layer. `q_stb` rises
`ACC_BITS + 1` clocks after the word's start.

Results are written to `output_buffer` bank `r` (output channel `r`) at address `4·g + j` for
group `g`, stream `j`. That address is the pixel index, so the output map has the same row-major
layout as the input map.

## Controller and one operation

`cc_controller` runs one tile per `start` pulse:

1. **LOAD** (`ROWS` clocks). Reads weight-buffer entries `wbase+ROWS-1` down to `wbase` and
   shifts them up the load chains. Entry `wbase` ends in row 0, and entry `wbase+r` is the packed
   filter row `r`.
2. **PRIME** (8 clocks). The shift block fetches pixel 0.
3. **STREAM** (`32·⌈npix/4⌉` clocks). Streams every pixel in the interleaved order above. The
   first clock carries `commit`. Slots past the last pixel carry zeros with `valid` low.
4. **DRAIN** (`ROWS + COLS + 80` clocks). Waits until the last result is through the array, ReLU
   and quantizer. Then `done` pulses.

From `start` to `done` takes `ROWS + 8 + 32·⌈npix/4⌉ + ROWS + COLS + 80` clocks. A 32×32 map at
default sizes therefore takes 8,376 clocks.

The host's sequence is:

1. Write the input maps with `ib_wr_*` (bank = channel in group order, address = `h·img_w + w`).
2. Write the packed weight rows with `wb_wr_*` (one call per column slot: weight and selector).
3. Set `img_h`, `img_w`, `npix = img_h·img_w`, `grp_size`, `dir`, `qshift` and `wbase`. Hold them
   while `busy` is high.
4. Pulse `start`.
5. After `done`, read results with `ob_rd_*`.

A layer with more than 32 filters runs as several operations, one per 32-row block of the packed
matrix, each with its own `wbase`.

## Where this design departs from the paper's architecture

- **No accumulation across column tiles.** `y_in` of the array is tied to zero. A layer whose
  packed matrix needs more than 32 combined columns (more than 256 input channels after packing,
  or poorly packed groups) can't be computed. That would need partial sums carried between tiles.
  Splitting over filters (row tiles) works.
- **No overlapped loading.** The cells support loading the next tile while the current one
  streams, but the controller loads, then streams, then drains. Throughput is lower than an
  always-busy schedule.
- **No cross-layer pipelining.** In the original architecture, each layer has its own array and
  outputs flow straight into the next one. Here, results go to the output buffer, and the host
  moves them back into the input buffer for the next layer.
- **32-bit accumulation only.** A narrower 16-bit variant for small networks is not provided.
- **Own choices where the source is silent:**
  - the quantization rule (power-of-two shift and saturation);
  - buffer sizes and banking;
  - the load chain and commit mechanism;
  - the sideband;
  - exact slot order within a group;
  - unsigned inputs;
  - asynchronous active-low reset.
- **Multiplier registers.** The register drawn on the multiplier's non-negated path is left out;
  both paths are combinational up to the output register.

## How far it can be trusted

Every block has a self-checking testbench against a behavioural model. Each reports
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_bitserial_mac` | random weights/inputs/accumulations, both signs, extremes |
| `tb_mx_cell` | channel selection, four interleaved streams, a new weight loaded while computing and committed at each group start |
| `tb_mx_array` | small array against a matrix model, skew, weight switch, sideband |
| `tb_relu_serial`, `tb_quantizer` | positive/negative/zero words, saturation, shifts |
| `tb_input_buffer`, `tb_weight_buffer`, `tb_output_buffer` | read-after-write, bank independence |
| `tb_group_router` | random group sizes 0..8, including groups running past the last channel |
| `tb_shift_block` | random shift direction per channel on random maps, edge zero padding, the fetch/swap slot protocol |
| `tb_cc_controller` | phase sequence, commit, valid slots, exact start-to-done cycle count |
| `tb_cc_system` | reduced-size system (8×4 array) over three operations against a full layer model: counts zero-padded taps, multiplexed channels, ReLU-zeroed and saturated outputs, partial groups and weight switches |
| `tb_cc_system_full` | the system at default parameters (32×32, 256 channels), two operations on 6×7 and 5×5 maps |

Every testbench was also run against a copy of its design with one deliberate fault, and it
reported failures. The system tests compare every output-buffer entry with a model that computes
shift, packed matrix product, ReLU and quantization directly.

## Simulating

All files are plain SystemVerilog; `rtl/cc_pkg.sv` must be compiled first. For example:

```
verilator --binary --timing -Wno-fatal rtl/cc_pkg.sv $(ls rtl/*.sv | grep -v cc_pkg) \
          tb/tb_cc_system.sv --top-module tb_cc_system
./obj_dir/Vtb_cc_system
```

Every testbench has a watchdog and ends with its `TB_RESULT` line. The default-size system
testbench builds a large model: the design has about 166k flip-flop bits, and the
buffers are plain register arrays (about 2.5 Mbit). Its compile takes about six minutes; the two
operations then simulate in about a minute.

## Files

`rtl/`:

- `cc_pkg.sv`: widths and the `wentry_t`, `xside_t` and `shift_dir_t` types.
- Arithmetic: `bitserial_mac.sv`, `mx_cell.sv`, `mx_array.sv`.
- Output stage: `relu_serial.sv`, `quantizer.sv`.
- Memories: `input_buffer.sv`, `weight_buffer.sv`, `output_buffer.sv`.
- Input path: `shift_block.sv`, `group_router.sv`.
- Control and top: `cc_controller.sv`, and `cc_system.sv` (the top).

`tb/` has one testbench per module plus `tb_cc_system_full.sv`.
