# Self-compensating approximate multiplication for image blending

An approximate multiplier saves power, area and delay by replacing some of its
adder cells with cells that do not really add. The price is an error that is
present for almost every operand pair, but whose size depends strongly on the
operands. This design predicts that error from the operands with a small
decision tree and adds the prediction back to the approximate product. The
predictor does not look at the operands bit by bit: each 8-bit operand is
reduced to one of 16 magnitude classes, and a fixed tree of 32 decision nodes on
the two classes picks one of 33 stored correction values.

The correction can sit in two places:

* **per multiplier (component level):** every multiplier has its own tree,
  fed with the multiplier's own operands, so each product gets its own
  correction;
* **per accelerator (frame level):** one tree serves a whole accelerator. It
  is fed with the *average* of each input image over a frame, and the single
  value it predicts is added to every product of that frame. This is cheaper
  and works when neighbouring data are alike, as in images, but it is less
  accurate.

The RTL applies both to multiplicative image blending: two RGB images are
multiplied pixel by pixel, each colour component on its own accelerator of two
multipliers and an exact adder.

## Hierarchy

```
sc_blend_top                 three colour channels + one frame sequencer
├── frame_ctrl               frame passes, stall, mode
└── sc_axacc  (x3: R, G, B)  one colour accelerator
    ├── sc_approx_mult (x2)  self-compensating multiplier
    │   ├── approx_array_mult   8x8 array, 9 approximate columns
    │   │   └── mult_cell          AMA5 or exact full adder
    │   ├── dt_comp_module      16-class quantizer + decision tree + leaf table
    │   └── comp_adder          product + signed correction, clamped
    ├── comp_adder (x2)      product + frame correction, clamped
    ├── exact_adder          A*B + C*D
    └── frame_comp_unit      frame sums, two seq_divider, one dt_comp_module
sc_pkg                       widths, mode enum, leaf table, cluster function
```

## The approximate multiplier

`approx_array_mult` is an unsigned 8x8 carry-save array multiplier: row 0
holds the partial products `a[j]&b[0]`; row *i* adds `a[j]&b[i]` to the sums
of the row above shifted by one and to its carries; a ripple-carry row merges
the last sums and carries into the upper 8 product bits. Every cell whose
result column is below 9 is an *approximate mirror adder 5* (AMA5) cell, whose
sum output is simply its partial-product input and whose carry output is its
incoming partial sum; its carry input is ignored. Cells that are half adders
in an exact array (the whole second row and the first cell of the final row)
stay exact, as do all cells in columns 9 to 15.

Only the operand width, the cell type and the number of approximate columns
(nine) come from the source design. The array layout and the pin mapping of
the AMA5 cell are choices made here, and they do not reproduce the original
multiplier exactly. Over all 65,536 operand pairs:

| statistic                         | this RTL | original |
|-----------------------------------|---------:|---------:|
| exact results                     | 1,688    | 3,116    |
| maximum error distance            | 796      | 756      |
| mean error distance               | 184.3    | 185      |
| distinct error distances          | 172      | 176      |
| pairs with error > 500 / 400 / 300| 1,556 / 5,226 / 12,586 | 1,575 / 5,454 / 12,922 |

The error of this array has both signs (the approximate product is larger
than the exact one for about 60 % of the pairs), so the correction is signed.

## The compensation tree

`dt_comp_module` maps each operand to a class `q = operand/16 + 1` (1 to 16,
equal ranges; the source only says that inputs are grouped into 16 classes by
magnitude). q1 is the class of the first operand (Input1), q2 that of the
second. The tree is written out below; at each node the left branch is taken
when the class is less than or equal to the threshold. Leaves are numbered
left to right, and the signed number after each leaf is the value added to
the product.

```
q1 <= 9:
  q1 <= 1:
    q2 <= 14:
      q2 <= 2 -> leaf  0: +108
      q2 >  2 -> leaf  1: -4
    q2 >  14 -> leaf  2: -116
  q1 >  1:
    q2 <= 12:
      q2 <= 4:
        q2 <= 2:
          q1 <= 3 -> leaf  3: +96
          q1 >  3:
            q2 <= 1:
              q1 <= 7 -> leaf  4: +80
              q1 >  7 -> leaf  5: +56
            q2 >  1 -> leaf  6: +56
        q2 >  2 -> leaf  7: +40
      q2 >  4:
        q1 <= 5 -> leaf  8: -24
        q1 >  5 -> leaf  9: -56
    q2 >  12:
      q1 <= 5 -> leaf 10: -120
      q1 >  5 -> leaf 11: -152
q1 >  9:
  q2 <= 3:
    q2 <= 1:
      q1 <= 14 -> leaf 12: +41
      q1 >  14 -> leaf 13: +0
    q2 >  1:
      q1 <= 10 -> leaf 14: +20
      q1 >  10:
        q2 <= 2:
          q1 <= 13 -> leaf 15: +34
          q1 >  13 -> leaf 16: -33
        q2 >  2 -> leaf 17: -16
  q2 >  3:
    q2 <= 13:
      q2 <= 9:
        q2 <= 8:
          q2 <= 5:
            q1 <= 12:
              q2 <= 4 -> leaf 18: -33
              q2 >  4 -> leaf 19: -134
            q1 >  12 -> leaf 20: -112
          q2 >  5:
            q1 <= 13:
              q2 <= 7:
                q2 <= 6 -> leaf 21: -176
                q2 >  6 -> leaf 22: -192
              q2 >  7 -> leaf 23: -208
            q1 >  13 -> leaf 24: -227
        q2 >  8:
          q1 <= 14 -> leaf 25: +41
          q1 >  14 -> leaf 26: +0
      q2 >  9:
        q2 <= 12 -> leaf 27: -15
        q2 >  12:
          q1 <= 13 -> leaf 28: -160
          q1 >  13 -> leaf 29: -166
    q2 >  13:
      q1 <= 12:
        q1 <= 10 -> leaf 30: -201
        q1 >  10 -> leaf 31: -192
      q1 >  12 -> leaf 32: -216
```

The tree's shape, the variable at each node and every threshold are those of
the trained C5.0 model of the source design. Its leaf values were not
published. The values here are this design's own: each leaf holds the
expected signed error (exact minus approximate product) of *this* multiplier
over all operand pairs that reach the leaf, `floor(sum/count + 1/2)`. They
are stored in `sc_pkg::LEAF_VALUE`, and `tb_dt_comp_module` recomputes them
from a reference model of the multiplier. To retrain for a different
multiplier, change that table; if the tree is retrained too, rewrite the
`if` chain in `dt_comp_module` and the node table in `tb/tb_ref_pkg.sv`.

With these values the mean error distance of a single multiplier drops from
184.3 to 162.7 and the maximum from 796 to 684. The source reports 185 to 110
and 756 to 520 for its own multiplier and leaf values. The smaller gain here
is expected: the tree was trained on the original multiplier's error, not on
this one's. Like the original, the correction also adds error to some pairs
that were exact (459 pairs stay exact after correction).

The tree, the quantizer and the table are combinational and work in
parallel with the multiplier; only the final add follows both.
`comp_adder` clamps the corrected product to 0..65535 (320 of the 65,536
pairs would go below zero, for example a small first operand with a large
second one) and flags the clamp.

## Frame-level compensation and the two-pass protocol

In frame mode the correction depends on the averages of the whole frame, but
it must be added to every pixel of that same frame. There is no frame buffer.
Instead the frame is streamed twice:

1. **measure pass**: `frame_comp_unit` adds up the image-1 and image-2
   pixels of its colour component and counts them. This pass produces no
   output.
2. **stall**: after the last beat of the measure pass, `frame_ctrl` drops
   `in_ready`. Two restoring dividers (`seq_divider`, one quotient bit
   per clock) form `floor(sum/count)` for each image. The averages go
   through the channel's own tree, and the result is registered as the frame
   correction. The stall lasts 8 + clog2(MAX_PIXELS+1) + 3 clocks: 28 at
   the default size, 21 at MAX_PIXELS = 512.
3. **apply pass**: the same frame is streamed again. Every product is the
   raw approximate product plus the frame correction, clamped.

The corrections of the three colour channels are computed independently, so
each channel gets its own value. The source only says that the frame average
drives one correction for the whole frame. The two-pass scheme, the divider
and the clamp are this design's choices.

## Interface of `sc_blend_top`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `mode` | in | `comp_mode_e` | `MODE_COMPONENT` or `MODE_ACCELERATOR`, taken on the first beat of a frame |
| `in_valid`, `in_ready`, `in_last` | in/out/in | 1 | beat handshake; `in_last` on the last beat of a pass |
| `in_px1[c][l]`, `in_px2[c][l]` | in | 8 | image-1 and image-2 pixel, colour c (0 R, 1 G, 2 B), lane l (two adjacent pixels per beat) |
| `out_valid`, `out_last` | out | 1 | result beat, one clock after the input beat |
| `out_prod[c][l]` | out | 16 | corrected product |
| `out_sum[c]` | out | 17 | exact sum of the two products of channel c (A*B + C*D) |
| `out_sat` | out | 6 | clamp flags, bit 2c+l |
| `measure_pass`, `apply_pass` | out | 1 | which pass the next beat belongs to |
| `frame_comp[c]` | out | 10 signed | current frame correction of channel c |

In component mode, send a frame once. In accelerator mode, send it while
`measure_pass` is high, and send it again after `in_ready` returns, when
`apply_pass` is high. A frame may hold at most MAX_PIXELS pixels per colour
component (default 100,000, one 250 x 400 image); an assertion catches
longer frames. Products are not rescaled; a blended 8-bit pixel is
round(product/255).

## How far the RTL follows the source

Taken from the source:

* 8-bit operands and nine approximate result columns built from AMA5 cells;
* 16 input classes and the complete decision-tree structure;
* correction added to the product, either per multiplier or per accelerator
  from frame averages;
* the two-multiplier-plus-exact-adder accelerator;
* one accelerator per colour component;
* frames of 250 x 400 pixels.

Chosen here:

* the array layout and the AMA5 pin mapping;
* the class formula;
* all leaf values and their 10-bit signed width;
* clamping;
* the two-pass frame protocol, the divider and the beat interface;
* registered outputs with one clock of latency.

Both compensation modes are built into each accelerator and selected at run
time. The source presents them as two separate configurations. The
uncompensated product is not selectable as an output; the testbenches
compute it for comparison.

Since the leaf values were fitted to a multiplier that differs from the
original, accuracy figures from this RTL should not be read as those of the
source design. The PSNR that the end-to-end testbenches print for their
synthetic gradient images is about 48.4 dB without correction, 49.4 dB with
per-multiplier correction and 49.0 dB with frame correction. Over the five
synthetic pairs of `tb_blend_examples`, per-multiplier correction gains
0.3 to 4.0 dB and frame correction 0.1 to 4.0 dB. The ordering (per
multiplier at least as good as per frame, both better than none) matches the
source. The gains are smaller, except on a nearly flat bright image pair.

## Simulation

Every testbench checks itself and ends with a `TB_RESULT checks=... failures=...`
line. Build any of them with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/sc_pkg.sv tb/tb_ref_pkg.sv tb/tb_sc_blend_full.sv \
    --top-module tb_sc_blend_full -o sim && ./obj_dir/sim
```

| testbench | what it checks |
|-----------|----------------|
| `tb_mult_cell` | AMA5 and exact behaviour of the cell, exhaustively |
| `tb_approx_array_mult` | all 65,536 products against a loop-based reference; error statistics |
| `tb_dt_comp_module` | leaf and value for all operand pairs against a table-driven tree walk; leaf values recomputed; every leaf reached |
| `tb_sc_approx_mult` | all 65,536 corrected products, clamp count, mean error reduction |
| `tb_exact_adder` | corner and random sums |
| `tb_frame_comp_unit` | averages, correction and latency over random frames |
| `tb_frame_ctrl` | pass sequencing, stall, mode changes, against a protocol model |
| `tb_sc_axacc` | one channel in both modes, one-clock latency, clamps |
| `tb_sc_blend_top` | whole engine on 32 x 16 frames (MAX_PIXELS = 512): component frame, two-pass frame, component frame; counts every mechanism |
| `tb_sc_blend_full` | the same sequence at default parameters on 250 x 400 frames (about 1.5 million checks) |
| `tb_blend_examples` | five synthetic 250 x 400 image pairs, each blended in both modes at default parameters; PSNR per example |

`tb/tb_ref_pkg.sv` holds the reference models: the multiplier as nested
loops, the tree as a flat node table, and the leaf-value computation. The
testbenches use only `$urandom`, and they reset or drive everything they
read.
