# Column streaming convolution engine

A CNN convolution layer slides a k x k filter over an image. This engine never
handles the whole k x k window at once. It splits the filter into its k columns.
For one filter column it streams image columns through a small, fixed array of
processing elements (PEs), and for every image column it produces a 1-D
convolution of that column with the filter column. Adding the k column results
(and the results of every input channel) gives the 2-D convolution.

The array is 11 x 11 PEs. Every clock a new *column set* of 21 pixels enters.
It produces up to 20 outputs (20 for k = 3..5, 22 - k for k = 6..11). The
array is rewired for each filter size, so no zero padding is needed at the image
border and one array serves filter sizes 3 to 11.

The architecture is the column streaming engine and mapping method of W. Lin and
T. Arslan, "A Column Streaming-Based Convolution Engine and Mapping Algorithm for
CNN-based Edge AI accelerators". That publication gives the PE, the array size,
the two input buses, the diagonal streaming and the PE layouts for 4 x 4 and
7 x 7 filters. It evaluates the engine only by cycle counts. Everything it leaves
open is filled in here, and the choices are marked as such below and in the
opening comment of every source file.

## 1. Arithmetic: filter column decomposition

Take an n x n image x[column][row] and a k x k filter w[i][j] (row i, column j).
The output map is m x m, with m = n - k + 1 (stride 1):

    out[r][mo] = B + sum_ch sum_j  ( sum_i w[ch][i][j] * x[ch][mo+j][r+i] )
                                     \______ 1-D column convolution ______/

Each bracket is a 1-D convolution of image column mo + j with filter column j.
The engine runs one **pass** per (input channel, filter column). During a pass
the k weights of that filter column stay in the PEs. Every needed image column
streams through once. The 1-D results are added into an output memory. The
bias B is added on the first pass.

## 2. The processing element and the array

```
              wcol[widx] --wload--> [weight]
                                        |
 bus1[r] ----+                          v
 bus2[r] ----|                       (  x  )----> prod  (to the reduction)
 PE(r+1,c-1)-|--[ mux ]--> [D  Q] ------+
 PE(r+1,c+1)-|     ^  src    feat       +----> to PE(r-1,c+1) / PE(r-1,c-1) / wires
 wire -------|
 bus2[c] ----+   (wire and bus2[c] only in the bottom row)
```

A PE (`cs_pe`) has three parts:

- **Feature register.** It is loaded every clock from a multiplexer.
- **Weight register.** It loads the PE's element of the current filter column.
- **Multiplier.**

The multiplexer selects one of these sources:

- bus 1 or bus 2, using the lane that matches the PE's row;
- the lower-left diagonal neighbour;
- the lower-right diagonal neighbour;
- in the bottom row only, a programmable wire or bus-2 lane number c.

With the lower-left source, a pixel that enters column 0 at row r moves one
column right and one row up per clock. Once the stream is running, **PE (r, c)
holds pixel r + c of the set that entered c clocks earlier.**

`cs_pe_array` builds 11 x 11 PEs. A bottom-row wire can take any PE or any bus-1
lane as its source. These wires are the "wire1..wire4" of the original figure.
Their endpoints were not given, so they are derived from the timing (section 4).

## 3. Mappings: where each filter weight sits

`cs_mapper` turns k into the configuration. This is the mapping algorithm,
written as combinational logic. For each PE it sets:

- the source;
- the weight index;
- the **output slot** (which output of the set the product belongs to);
- the **lag** of its column (how many clocks the column runs behind its set).

It also sets the wire sources and the number of outputs per set (`ops`).

Output slot o of a set starting at image row rb is

    y[o] = sum_i w[i] * x[rb + o + i].

A group of PEs gives y[o] when its weights w[0..k-1] meet pixels o..o+k-1.

### Narrow mode, k = 3..5

The array holds two blocks of k columns:

- Block 0 is fed by bus 1 in column 0 with pixels rb .. rb+10.
- Block 1 is fed by bus 2 in column k with pixels rb+10 .. rb+20.

In each block, the first floor(10/k)·k rows hold the filter column *vertically*.
The rows left over, up to row 9, hold it *horizontally*. Layout for k = 4
(weights a..d, block 0; block 1 is the same, shifted right by 4 columns):

```
 row   col0 col1 col2 col3        slot (block 0)
  0-3   a-d  a-d  a-d  a-d   ->   y0   y1   y2   y3   (vertical, one per column)
  4-7   a-d  a-d  a-d  a-d   ->   y4   y5   y6   y7
  8     a    b    c    d     ->   y8                  (horizontal, whole row)
  9     a    b    c    d     ->   y9
 10     -    -    -    -          (carries data only)
```

Each block gives 10 outputs, so a set gives 20 and the next set starts 20 rows
lower. Near its right edge, block 0 needs pixels rb+11 .. rb+13, which are not on
bus 1. Its bottom-row wires fetch them from PE (1, k+c-1) of block 1. Block 1
needs pixels rb+21 .. rb+23. Those pixels belong to the *next* set, which has
just entered block 0. Block 1's wires therefore fetch from bus-1 lane 1 and
from PE (2, c-2).

### Wide mode, k = 6..11

The array is one block of 11 columns, fed by bus 1 in column 0. Rows 0..k-1 hold
the filter column vertically in all 11 columns, giving y0..y10. Rows k..10 hold
it horizontally in columns 11-k..10, giving y11..y(21-k). A set therefore has
22 - k outputs, 15 for k = 7. The PEs to the left of the horizontal rows are
spare PEs. Bottom-row PE (10, c) needs pixel rb+10+c exactly when its set
reaches column c. Bus 2 carries those pixels as ten lanes, and lane c is delayed
by c clocks in the streamer. Pixels rb+15 .. rb+20 are thus read again as part
of the next set. This is the overlap between consecutive sets that the original
design describes.

## 4. Timing of one column set

Let a set be read from the feature memory in cycle i.

| cycle        | where the set is                                                 |
|--------------|------------------------------------------------------------------|
| i            | `cs_ctrl` issues the read (column, first row rb)                 |
| i+1          | the memory returns pixels rb..rb+20; `cs_col_streamer` puts them on bus 1 / bus 2 |
| i+2+c        | PE column c holds the set (c = 0..10); products are formed        |
| i+12         | `cs_reduce` has delayed every column by 10 - lag, so all products of the set line up |
| i+13         | the NOUT slot sums are registered (`LAT_SUMS` = 13)               |
| i+13 / i+14  | `cs_accum` reads the output word, then writes it back plus the sums |

A new set is read every clock, and the array shifts every clock. It never
stalls: a cycle without a read just carries zeros. A set's bookkeeping travels
beside it in a 13-stage pipeline (`set_meta_t`). The bookkeeping is:

- valid;
- whether the set produces outputs;
- the first-pass flag;
- the output word address;
- the lane mask.

**Tail set.** In narrow mode block 1 takes pixels from the next set. At the
bottom of an image column, the next set would come from the next column. If the
current column still has the pixels needed (n >= rb + 2 after the last set), the
controller issues one extra set from the same column. That set is only used as
data, and its outputs are masked.

**Passes.** A pass runs as follows:

1. One cycle of weight preload.
2. m x (sets per column + tail) cycles of streaming.
3. 14 drain cycles (`DRAIN_CYC`), so that the next column's weights cannot meet
   sets still in the array.

A run takes k · nch · (1 + m·sets + 14) + 1 cycles.

## 5. Interfaces (`cs_engine`)

| group | signals | behaviour |
|-------|---------|-----------|
| run | `start`, `k` (3..11), `n` (<= `N_MAX`), `nch` (1..`MAX_CH`); `busy`, `done`, `err` | `start` is taken when idle. Bad sizes give `err` and `done` at once. `done` pulses when the output memory holds the result. |
| filters | `fw_en`, `fw_ch`, `fw_row`, `fw_col`, `fw_data`; `bias_we`, `bias_data` | One weight per clock, written before `start`. |
| feature memory | `fr_en`, `fr_ch`, `fr_col`, `fr_row` -> `fr_data[21]` next cycle | Returns pixels fr_row..fr_row+20 of one image column. Values below the image are ignored. |
| output memory | `om_re`, `om_raddr` -> `om_rdata[20]` next cycle; `om_we`, `om_waddr`, `om_wmask`, `om_wdata[20]` | Words of 20 lanes x 40 bits. |

Output pixel (row r, column mo) ends in lane r mod ops of word
mo·ceil(m/ops) + r div ops. Here ops = 20 for k <= 5 and 22 - k for k >= 6.
Data are 16-bit signed, products 32-bit and sums 40-bit. There is no rounding,
scaling or activation.

The feature memory and the output memory are outside the engine. The original
design only says the features come "from memory such as SRAM". The testbenches
contain behavioural models of both memories (`tb/tb_feat_mem.sv`,
`tb/tb_out_mem.sv`).

## 6. Cycle counts for a 227 x 227 map

These counts come from simulating the full-size testbench. Every output was
checked against a direct convolution. The original evaluation gives its counts
only as a plot, and these numbers follow that curve closely.

| k | outputs/set | sets per column | cycles |
|---|---|---|---|
| 3 | 20 | 12 | 8 146 |
| 4 | 20 | 12 | 10 813 |
| 5 | 20 | 12 | 13 456 |
| 6 | 16 | 14 | 18 739 |
| 7 | 15 | 15 | 23 311 |
| 8 | 14 | 16 | 28 281 |
| 9 | 13 | 17 | 33 643 |
| 10 | 12 | 19 | 41 571 |
| 11 | 11 | 20 | 47 906 |

## 7. What follows the original design and what does not

From the original design:

- an 11 x 11 array, with 11-pixel sub-columns (the "j-height");
- a PE with a feature register, a latched weight and a multiplier;
- diagonal streaming that can be programmed in either direction;
- bus 1 and bus 2;
- the vertical and horizontal weight layouts for 4 x 4 and 7 x 7 filters, here
  generalised to 3..5 and 6..11;
- 20 outputs per set for k = 3..5 and 15 for k = 7;
- one filter column held until all features have streamed past;
- adding the bias;
- the 227 x 227 workload.

This design's own choices:

- **Word widths.** 16/32/40 bits; none are given.
- **Multiplexer inputs and encodings.** The published figure shows multiplexers
  but not their inputs.
- **Wire endpoints in narrow mode.** They were derived from the timing.
- **Wide-mode bus 2.** The original has bus 2 enter at the right edge and move
  diagonally left. Here bus 2 feeds the bottom row through lanes that are
  delayed by c clocks. The pixels and their arrival times are the same as the
  published "one clock behind" overlap, but the route differs. The lower-right
  diagonal source exists in the PE but is not used by either mapping.
- **Reduction.** The way products are added into outputs was not described.
  Here each product is delayed by 10 - lag cycles. Running sums then go down
  every column and along every row, restarting where the output slot changes,
  which is two adders per PE. For every output, a multiplexer indexed by k
  picks the running sum at the last PE of that output's run. This only works for
  layouts in which every output is one unbroken vertical or horizontal run of
  PEs. Both mappings are like that.
- **Accumulation over passes.** It uses read-modify-write of an external
  output memory.
- **Tail set.** Added so that narrow mode is correct at the bottom of every
  image column.
- **Drain between passes.** Passes do not overlap, which costs 15 cycles per
  pass.
- **Scope limits.** Stride 1 only, one output channel per run, and at most 3
  input channels (`MAX_CH`).

## 8. Files and simulation

`rtl/` contains one module per file. `cs_pkg.sv` holds the geometry, widths,
timing constants and configuration structs, and every other file imports it.
The top is `cs_engine.sv`.

`tb/` holds one self-checking testbench per module (`tb_<module>.sv`) and the
two memory models. It also holds `tb_cs_engine.sv`, the end-to-end test: every
k from 3 to 11, one to three channels, and the corner cases m = 1, tail set and
bad k. It counts each mechanism. Finally there is `tb_cs_engine_full.sv`, which
runs the 227 x 227 map at default parameters for every k. Each testbench prints
`TB_RESULT checks=N failures=F`.

```
verilator --binary --timing --assert -Irtl -Itb rtl/cs_pkg.sv rtl/*.sv \
    tb/tb_feat_mem.sv tb/tb_out_mem.sv tb/tb_cs_engine_full.sv \
    --top-module tb_cs_engine_full -o sim && ./obj_dir/sim
```

The full-size run takes a few seconds.

To change the array size, edit `ROWS` and `COLS` in `cs_pkg`. The mapper's
layout rules are written in terms of them, but they have been verified only for
11 x 11. The function `run_end` in `cs_reduce` repeats where each output's run
of PEs ends, so a change to a mapping must be made in both files. To change the word widths, edit `DATA_W` and `ACC_W`. Larger images
need `N_MAX` and, above 511, `COORD_W`.

## 9. How far to trust it

- The mapping for every k has been checked two ways. Structurally, each output
  slot collects the right weight/pixel pairs and each fed PE receives the pixel
  it should, one clock earlier. End to end, results are bit-exact against a
  reference convolution on small images with random data and on the full
  227 x 227 map.
- Each unit testbench has been shown to fail on a deliberately broken copy of
  its module.
- Not verified: timing closure, area and power. There is no physical
  implementation; memories are behavioural.
