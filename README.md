# A dilated-convolution accelerator with a hierarchical pixel array

Dilated convolutions enlarge a network's field of view without adding
weights: a 3 x 3 filter with dilation rate D reads nine pixels spread over a
(2D+1) x (2D+1) window. Convolution engines built around a 2-D shift register
of pixels handle this badly. The usual trick is to pad the filter with zeros
and run it as a dense (2D+1) x (2D+1) filter, so a 3 x 3 filter at D = 2
costs 25 cycles instead of 9, and the cost grows with D².

This design removes that cost. The pixel array that feeds the multipliers can
move its whole tile by **any distance D from 1 to 2^H − 1 in one clock
cycle**. A K x K dilated filter therefore takes K·K compute cycles per input
channel whatever D is. For 3 x 3 at D = 2 that is 25/9 = 2.78 times fewer
cycles than the zero-padding method.

The architecture is the one proposed with the CASSOD-Net network modules
(T.-W. Chen et al., "CASSOD-Net: Cascaded and Separable Structures of Dilated
Convolution for Embedded Vision Systems and Applications"). The RTL here is an
independent implementation of it. Where that description is silent, the
choices made are listed below.

The same hardware runs the CASSOD modules ("cascaded and separable structure
of dilated convolution"). A CASSOD module replaces one 3 x 3 dilated layer
with two cascaded 2 x 2 dilated layers at the same D. Cascading two 2 x 2
filters at dilation D covers exactly the positions of a 3 x 3 filter at
dilation D. The cascade needs 4 + 4 taps instead of 9, and fewer weights.
Either layer may be depthwise:

| variant  | layer 1             | layer 2             | weights                 |
|----------|---------------------|---------------------|-------------------------|
| CASSOD-A | 2 x 2 depthwise     | 2 x 2 standard      | 4·C1·(1 + C2)           |
| CASSOD-C | 2 x 2 standard      | 2 x 2 standard      | 4·(C1 + C2)·C1 (or ·C2) |
| CASSOD-D | 2 x 2 depthwise     | 2 x 2 depthwise     | 4·2·C1                  |

(A standard 3 x 3 dilated layer has 9·C1·C2 weights; a depthwise one has 9·C1.)

## Block structure

```
             +--------------+    +-------------+    +---------------+    +------------+
 DRAM  --->  | pixel_memory | -> | pixel_array | -> |               |    | activation |
 (ports)     +--------------+    +-------------+    |  convolution  | -> | _pooling   | --> DRAM
       --->  | filter_weight| -> | filter_     | -> |  _processor   |    | _unit      |     (ports)
             | _memory      |    | weight_cache|    | (conv_units)  |    +------------+
             +--------------+    +-------------+    +---------------+
                           ^ all driven by layer_sequencer ^
```

| module                    | what it is                                                                  |
|---------------------------|-----------------------------------------------------------------------------|
| `cassod_pkg`              | shared sizes, types, the move direction enum and the operation config       |
| `pixel_memory`            | 64 KB SRAM (as an array), one 6-pixel tile row per word                    |
| `filter_weight_memory`    | 64 KB SRAM (as an array), one filter tap for all 14 lanes per word         |
| `pixel_cache_stage`       | one hierarchical stage: a grid of selectors moving the tile by 0 or 2^h    |
| `pixel_array`             | 6 x 6 pixel buffers plus H = 3 stages; loads a tile, moves it by D per cycle |
| `filter_weight_cache`     | 49-entry register file (7 x 7 taps) read once per compute cycle            |
| `conv_unit`               | multiply-accumulate cell: buffer += pixel × weight                          |
| `convolution_processor`   | 6 x 6 x 14 = 504 conv units, one per tile position per output lane         |
| `activation_pooling_unit` | shift, ReLU, saturation to 8 bits, optional 2 x 2 max pooling              |
| `layer_sequencer`         | runs one operation: load, compute, drain                                    |
| `cassod_top`              | the whole accelerator; DRAM traffic enters and leaves through ports        |

DRAM is not part of the RTL. The top exposes the two memory write ports and
the output stream, and an external host does the DRAM traffic: it places
tiles and weights, collects results, and writes one layer's output back as
the next layer's input.

## The pixel array

This is the part that makes the design work, and the part to read first
(`pixel_cache_stage.sv`, `pixel_array.sv`).

The array holds a ROWS x COLS tile of one input channel in pixel buffers.
After the buffers come H stages of selectors, connected in a ring:

```
 buffers --> stage 3 (moves 0 or 4) --> stage 2 (0 or 2) --> stage 1 (0 or 1) --> buffers
```

Every selector in stage h has five inputs: the pixel at its own position, and
the pixels 2^h positions to its left, right, above and below. One cycle
carries a single move command `(dir, shift_dist)` to every stage. Bit h of
`shift_dist` tells stage h whether to take the neighbour in direction `dir`
or its own pixel. The moves of the stages add up, so the tile moves by

    D = shift_dist[0]·1 + shift_dist[1]·2 + shift_dist[2]·4,   0 <= D <= 7

in one cycle. Only stage 1 is followed by registers. A move of 7 costs the
same one cycle as a move of 1, and the path is three 5-input multiplexers
deep. Adding a stage doubles the largest D. The hardware grows linearly with
H, not with the largest D.

**Direction convention.** `DIR_LEFT` means every buffer takes the pixel to
its right, so the image content moves left and the filter window advances to
the right over the image. If the buffer at (r, c) holds image pixel
(r + dy, c + dx), then after a move of D to the left it holds
(r + dy, c + dx + D).

**Edges.** Neighbour links wrap around the grid: the array is a torus. After
a move, the pixels that leave one edge come back at the other. This has a
consequence for users, explained under "Tiles, edges and valid outputs"
below.

**Loading.** With `load` set the tile moves up one row and a new row from
the pixel memory enters at the bottom. ROWS load cycles replace the whole
tile.

## One operation, cycle by cycle

An *operation* is one tile, `num_ch` input channels, and up to 14 output
channels (or up to 14 channels of a depthwise layer). `layer_sequencer` runs
it as follows.

For each input channel c:

1. **LOAD**, max(ROWS, K·K) + 1 cycles. In cycle i the sequencer reads two
   memories in parallel:
   * tile row i of channel c from `pixel_memory`, at word `pix_base + c·ROWS + i`;
   * filter tap i of channel c from `filter_weight_memory`, at word
     `wgt_base + c·K·K + i`.

   Both memories answer one cycle later. The row is shifted into the pixel
   array and the tap is written into the weight cache.
2. **COMPUTE**, exactly K·K cycles. Each cycle, every conv unit multiplies
   the pixel in its buffer by its lane's weight for the current tap (ky, kx)
   and accumulates. In the same cycle the sequencer issues the move that
   brings the next tap's pixels into place. The taps are visited in
   serpentine order:

   ```
   filter row 0:  (0,0) -L-> (0,1) -L-> (0,2)
                                          |U
   filter row 1:  (1,0) <-R- (1,1) <-R- (1,2)
                    |U
   filter row 2:  (2,0) -L-> (2,1) -L-> (2,2)        every arrow is one move of D
   ```

   When tap (ky, kx) is read, the unit at (r, c) sees image pixel
   (r + ky·D, c + kx·D). The order never needs more than one move per cycle.

After the last channel comes the **DRAIN**. One lane per cycle (14 lanes,
or `num_ch` lanes for a depthwise layer) goes through the activation/pooling
unit. That lane's 36 results leave on `out_data` one cycle later.

Cycle count of an operation, from `start` to the last output:

    num_ch · (max(ROWS, K·K) + 1 + K·K) + lanes_drained + 1

The COMPUTE part, num_ch·K·K, does not depend on D. Both the sequencer test
and the end-to-end test check this. The load and compute phases do not
overlap: there is no double buffering.

**Standard and depthwise.** In a standard operation all 14 lanes accumulate
over all channels. The sums are cleared at the first tap of channel 0. In a
depthwise operation (`cfg.depthwise`), channel c drives only lane c, and lane
c is cleared at channel c's first tap. One operation therefore filters up to
14 channels independently. The weight word for tap t of channel c must then
hold channel c's weight in lane c; the other lanes are ignored.

## Tiles, edges and valid outputs

Because the array is a torus, a lane's output at (r, c) is

    out(r, c) = sum over ch, ky, kx of  I[ch][(r + ky·D) mod ROWS][(c + kx·D) mod COLS] · W[ky][kx]

This is a convolution anchored at the top-left of its window. Outputs whose
window (K−1)·D + 1 fits inside the tile without wrapping are ordinary "valid"
convolution results. With a 6 x 6 tile, those are the top-left
(6 − (K−1)·D) x (6 − (K−1)·D) outputs:

| filter, D       | window | wrap-free outputs per 6 x 6 tile |
|-----------------|--------|----------------------------------|
| 3 x 3, D = 1    | 3      | 4 x 4                            |
| 3 x 3, D = 2    | 5      | 2 x 2                            |
| 2 x 2, D = 2    | 3      | 4 x 4                            |
| 2 x 2, D = 4    | 5      | 2 x 2                            |
| 3 x 3, D = 3; 2 x 2, D = 6; 7 x 7 | 7 | none                       |

The host covers an image with overlapping tiles and keeps the wrap-free
outputs. When a CASSOD cascade runs on one tile, the second layer reads the
first layer's wrapped outputs too. Its wrap-free region is the one set by the
combined 3 x 3 window.

The 2 x 2 dilated filter can also be written centred, with taps at ±D/2 (D
even), as in the CASSOD formulation. That output at (i, j) equals this
design's output at (i − D/2, j − D/2).

The 6 x 6 array is the size of the example the design is drawn from. The
rates given as the chip's specification (2 x 2 at D = 2, 4, 6; 3 x 3 at
D = 1, 2, 3; filters up to 7 x 7) need a window of 7, and so a tile of at
least 7 x 7. ROWS and COLS are parameters of `cassod_top` and of every block
below it. A larger array only costs more buffers, selectors and conv units.
Nothing else in the RTL depends on 6. (LANES times ROWS·COLS sets the MAC
count.)

## Output stage

`activation_pooling_unit` turns each 32-bit sum into an 8-bit pixel in four
steps:

1. arithmetic right shift by `out_shift`, which rounds toward −∞;
2. ReLU, if `relu` is set;
3. saturation to [−128, 127];
4. if `pool` is set, 2 x 2 max pooling with stride 2. The 3 x 3 pooled map
   goes in the top-left corner of `out_data`; the other entries are 0.

Batch normalisation is expected to be folded into the weights and the shift.

## Configuration and memory layout

`layer_cfg_t` (in `cassod_pkg`) is sampled with `start`:

| field       | bits | meaning                                               |
|-------------|------|-------------------------------------------------------|
| `ksize`     | 3    | filter side K, 1..7                                   |
| `dilation`  | 3    | D, 1..7 (bit h enables stage h)                       |
| `depthwise` | 1    | depthwise operation                                   |
| `num_ch`    | 10   | input channels (≤ 14 when depthwise)                  |
| `pix_base`  | 16   | word of tile row 0 of channel 0 in `pixel_memory`     |
| `wgt_base`  | 16   | word of tap 0 of channel 0 in `filter_weight_memory`  |
| `out_shift` | 5    | requantisation shift                                  |
| `relu`      | 1    | apply ReLU                                            |
| `pool`      | 1    | apply 2 x 2 max pooling                               |

Layout: pixel word `pix_base + c·ROWS + r` holds row r of channel c, with
pixel [0] leftmost. Weight word `wgt_base + c·K·K + ky·K + kx` holds tap
(ky, kx) of input channel c, with element [m] for output lane m. Pixels and
weights are signed 8-bit; sums are signed 32-bit. Memory reads at an address
at or beyond the depth return 0, and writes there are dropped. A concurrent
assertion in the sequencer flags an unsupported configuration.

## Sizes

| parameter                    | default | source                                                               |
|------------------------------|---------|----------------------------------------------------------------------|
| hierarchical stages H        | 3       | specification: H = 3, D up to 2^3 − 1 = 7                            |
| array ROWS x COLS            | 6 x 6   | the example array the pixel-array structure is drawn with            |
| largest filter               | 7 x 7   | specification                                                        |
| output lanes                 | 14      | this design: 6·6·14 = 504 MACs, the nearest fit below the 512 MACs/cycle implied by 409.6 GOPS at 400 MHz |
| pixel / weight memory        | 64 KB + 64 KB | specification gives 128 KB in total; the even split is this design's |
| pixel, weight, sum widths    | 8, 8, 32 bits | this design                                                    |

## What follows the source design and what is this design's own

These follow the source design:
* the six blocks and their connections;
* the conv unit (multiply, add into a buffer);
* the hierarchical pixel array: per-stage moves of 0 or 2^h in four
  directions, 5-input selectors, a pixel buffer only after stage 1, the
  stage-1 → stage-3 → stage-2 → stage-1 ring, and wrap-around links;
* D composed as a sum of stage moves;
* H = 3, 7 x 7 filters, 128 KB of memory;
* the CASSOD layer structures.

These are this design's own choices:
* data widths and the memory split and word layout;
* the sequencer and its serpentine tap order;
* row-wise loading from the bottom edge;
* the lane arrangement of the MACs;
* the details of the activation/pooling unit;
* synchronous active-low reset.

One wiring detail was chosen where the sources disagree. In the drawing,
each stage-1 selector's neighbour inputs come from the neighbours' buffer
outputs. The prose says a buffer's input is connected to its neighbours'
inputs. This design follows the prose: every selector takes its neighbours'
*stage inputs*. Only then do the moves of successive stages add up to
D = Σ 2^h.

Not built:
* the DRAM and its controller;
* the zero-padding baseline (it can be emulated by running a zero-padded
  (2D+1) x (2D+1) filter at D = 1, which the workload test does);
* stride-2 convolution;
* double buffering of tiles and weights.

No timing closure or gate count has been done for the 400 MHz, 28 nm target.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

| testbench                    | checks                                                                |
|------------------------------|-----------------------------------------------------------------------|
| `conv_unit_tb`               | 2000 random MACs incl. −128/127 operands, clear and hold               |
| `pixel_cache_stage_tb`       | stages with shift 1, 2, 4: all directions, enabled and disabled        |
| `pixel_array_tb`             | row loading; 600 random moves of every D = 0..7, one cycle each        |
| `filter_weight_cache_tb`     | all 49 entries, random read-back and overwrite                         |
| `pixel_memory_tb`, `filter_weight_memory_tb` | full default size, latency, hold, out-of-range         |
| `convolution_processor_tb`   | 504 MACs against a reference with random lane enables/clears           |
| `activation_pooling_unit_tb` | shift/ReLU/saturation/pooling against a reference                      |
| `layer_sequencer_tb`         | K = 1, 2, 3, 5, 7 and D = 1..7, standard and depthwise (details below) |
| `cassod_top_tb`              | end to end at default size (details below)                             |
| `workload_fig9_tb`           | a 3 x 3 D = 2 layer with 64 input channels over a 12 x 12 image (details below) |

`layer_sequencer_tb` checks that the tile offset built up from the move
commands always equals the tap read from the cache. It also checks the
memory addresses and the exact cycle counts.

`cassod_top_tb` runs at the default size. It covers:
* 3 x 3 layers at every D = 1..7, with the same compute cycles for each D;
* 2 x 2 layers at D = 2, 4, 6;
* 5 x 5, 7 x 7 and 1 x 1 layers;
* depthwise layers, ReLU, pooling and saturation;
* CASSOD-A, -C and -D cascades, with the first layer's output fed back as
  the second layer's input.

It counts how often each of these mechanisms happens.

`workload_fig9_tb` covers the 12 x 12 image with overlapping tiles and checks
the valid output against a reference. It then runs the same tile as a
zero-padded 5 x 5 filter at D = 1 and checks two things: the outputs are
identical, and the compute cycles are 64 x 25 against 64 x 9.

To run one with Verilator (5.x), from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/cassod_pkg.sv tb/cassod_top_tb.sv --top-module cassod_top_tb -o sim
./obj_dir/sim
```

Replace `cassod_top_tb` with any other testbench name. Every test uses
`$urandom` for its stimulus and finishes in seconds.
