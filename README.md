# Road sign detection by colour segmentation: a streaming RTL pipeline

This design finds yellow road signs in a camera image without any multiplier
in the pixel path. Every pixel's chroma, the pair (Cb, Cr), is assigned to the
nearest of a few programmed colour centres under the L1 (Manhattan) distance.
That *minimum distance classifier* is the core of the design. The class image
is then cleaned with a median filter and cut into connected components, each
colour class separately. A component counts as a road sign when it is yellow,
larger than 200 pixels, and its bounding box has a width/height ratio between
0.7 and 3. Luma is ignored, which makes the colour decision largely
independent of lighting.

The RTL follows the structure of a published FPGA design: Zhao, Thörnberg,
Shi and Hashemi, *Color Segmentation on FPGA Using Minimum Distance Classifier
for Automatic Road Sign Detection*. Where that publication is silent, this
implementation makes its own choices; the section "What is published and what
is chosen here" lists them.

```
 Cb,Cr ──► gauss3x3 ──► mdc ──────────► median3x3 ──► mcl_labeler ──► feature_extract ──► sign_detector
 stream    3x3 smooth   nearest centre   3x3 median    4-connected     class, area,         yellow, area>200,
                        (L1, C classes)  on classes    multi-class     bounding box         0.7 < w/h < 3
                        ▲                                 labels        per component
                        └─ cfg_wr/cfg_addr/cfg_data: class centres
```

Every stage takes one pixel per clock. A 1000 x 630 frame therefore takes
630 000 cycles, plus the frame blanking described under "Streams, latency and
blanking".

## The minimum distance classifier (`mdc`)

### What it computes

For an input vector x with D dimensions and C programmed centres u_j:

    label = argmin_j  sum_k |x_k - u_j,k|

Ties go to the lowest class index. In this system D = 2 (Cb, Cr) and C = 4.
The default centres are the four colour classes of the published
measurements:

| class | meaning                        | Cb  | Cr  |
|-------|--------------------------------|-----|-----|
| 0     | background                     | 127 | 128 |
| 1     | yellow                         | 88  | 151 |
| 2     | red                            | 116 | 157 |
| 3     | red (other illumination)       | 109 | 180 |

Both red classes are separate labels in hardware. The sign rule only looks at
class 1.

### Interface: a memory that classifies

`mdc` is used like a small memory:

| port        | width                | meaning |
|-------------|----------------------|---------|
| `clk`       | 1                    | clock |
| `en`        | 1                    | clock enable of every register; low = stall |
| `wr`        | 1                    | 1: programming, 0: classifying |
| `addr`      | ceil(log2(C*D))      | register-file cell to write |
| `data_in`   | (R+2)*D              | input vector; dimension k in bits [k*(R+2) +: R+2] |
| `label_out` | ceil(log2 C)         | class index |

**Programming.** With `wr` and `en` high, `data_in[R+1:0]` is written to cell
`addr`. The centres sit in one flat array of C*D cells, with dimensions
running fastest:

```
cell 0      class 0, dim 0        (Cb of background)
cell 1      class 0, dim 1        (Cr of background)
cell 2      class 1, dim 0
...
cell C*D-1  class C-1, dim D-1
```

**Classifying.** With `wr` low, a new vector may be applied on every enabled
cycle. Its class appears on `label_out` after exactly **3*D + ceil(log2 C)**
enabled cycles. At the defaults that is 8 cycles. The module has no valid
output and no reset. A user that needs framing carries it alongside in a shift
register of the same length; the top level does this with `delay_line`.

Each dimension carries two bits more than the pixel resolution R. That makes
|x - u| representable as a two's-complement difference, and the sum of up to
four such magnitudes cannot overflow. With more than four dimensions of full
range, the sum would wrap.

### Inside: C parallel pipelines and a minimum tree

```
            ┌ process 0 ┐  ┌ process 1 ┐        ┌ process D-1 ┐
 x ──┬────► │ 3 cycles  │─►│ 3 cycles  │─► … ─► │  3 cycles   │──► dist 0 ──┐
     ├────► │           │─►│           │─► … ─► │             │──► dist 1 ──┤ pairwise
     ⋮                                                                      ├─ minimum ──► label
     └────► │           │─►│           │─► … ─► │             │──► dist C-1─┘ tree
```

There is one distance pipeline (`mdc_distance_pipe`) per class. All of them
receive the same vector, so all C distances reach the minimum tree in the same
cycle. A pipeline is a chain of D *processes*. The whole input vector travels
down the chain in a buffer of D cells. Process k handles dimension k in three
register stages:

| cycle | operation |
|-------|-----------|
| 1     | diff = cell[k] − u[k]  (R+2-bit two's complement) |
| 2     | mag = \|diff\| |
| 3     | process 0: cell[0] = mag. Process k > 0: cell[0] = cell[0] + mag |

Cell 0 therefore starts as dimension 0 and ends as the running distance.
After the last process, only cell 0 is passed on. Adding one dimension adds one
process, that is three more register stages, and nothing else changes. D is a
parameter, so the chain is generated to any length.

The minimum tree (`mdc_min_select`) compares neighbouring distances in pairs
and registers the smaller one together with its class index, one register
level per tree level. A distance left without a partner on some level (with
C = 5, for example) is registered unchanged and waits for the next level.
After ceil(log2 C) levels one index remains.

The testbenches check the latency of `mdc` for two configurations: R=8, D=2,
C=4 (8 cycles) and R=6, D=3, C=5 (12 cycles). Both are run with random
stalls on `en`.

## The 3x3 filters (`window3x3`, `gauss3x3`, `median3x3`)

Both filters share `window3x3`. It keeps two line buffers of W pixels and a
3x3 register window. Each accepted pixel shifts the column {row y−2, row y−1,
row y} into the window, so the window is always centred one row and one column
behind the input. The last row of a frame would then never be centred, so
after the final pixel of a frame the window steps on its own for W+1 cycles to
push it out. The input must be idle during that flush; an assertion checks
this. Centres on the image border are passed through unfiltered.

* `gauss3x3` smooths Cb and Cr separately. It uses the binomial kernel
  `1 2 1 / 2 4 2 / 1 2 1`, computed with shifts and adds, divided by 16 and
  rounded to nearest. The smoothing removes isolated off-colour pixels before
  they can become tiny components.
* `median3x3` works on the class image. Without sorting, it picks the element
  that has fewer than five smaller neighbours and at least five smaller or
  equal ones (the 5th of 9). This takes 81 comparators of two bits and one
  cycle. It removes what survives the smoothing, such as the digits printed
  inside a sign.

Each filter has a latency of W+3 cycles: W+2 through the window, one through
the output register.

## Multi-class component labeling (`mcl_labeler`)

A component is a 4-connected set of pixels that share a class. The labeler
sees each pixel (P3) once, in raster order, together with the pixel above (P1)
and the pixel to its left (P2):

```
      P1
  P2  P3      scan: left to right, then top to bottom
```

P1 comes from two line buffers of W entries: one holds the class of the row
above, and one holds its label. P2 comes from a class register and a label
register. The extra class buffer is what makes the labeler *multi-class*: a
neighbour counts only if its class equals P3's. Every class is labeled,
background included.

| P1 same class | P2 same class | result |
|---|---|---|
| no  | no  | open a new label (`ev_new`) |
| yes | no  | take P1's label |
| no  | yes | take P2's label |
| yes | yes | equal labels: take it. Different labels: **merge**. P3 takes the lower one, and the higher one is retired (`ev_merge`, `ev_merge_hi`) |

Merges are the subtle part. When a U shape is scanned, its two arms get
different labels, and they only meet at the bottom. By then, the row buffer
still holds the retired label for pixels above. The labeler keeps an
equivalence table `parent[]`. It is always flat: every label opened in the
frame points straight at the root of its component. A label read from the row
buffer is translated through this table by a single lookup. On a merge of hi
into lo, every table entry equal to hi is rewritten to lo in the same cycle,
which is one comparator per label. Chains never form, so one lookup is always
enough, and the labeler never stalls.

Labels are opened in order and not reused within a frame. If all `LABELS`
entries are taken, further new components share the last label and
`overflow` stays high until the next frame. Features of that frame are then
unreliable. With both filters in place, the published measurements show at
most about 415 components per 1000 x 630 image. A single-pass labeler opens
more labels than it keeps; the default of 1024 labels leaves room for that.
Without the filters, up to about 7300 components were reported, which would
overflow.

For each input pixel, the labeler emits one registered event on the following
cycle. The event carries position, class, label, `ev_new`, `ev_merge` and
`ev_merge_hi`. The top level exposes the position and label as the labeled
image (`lab_*`).

## Features and the sign rule (`feature_extract`, `sign_detector`)

`feature_extract` keeps one record per label: class, area and bounding box. It
updates them from the events:

* a new label starts a record;
* a pixel extends its label's record;
* a merge folds the retired record into the survivor (the areas add and the
  boxes unite) and marks the retired record dead.

After the frame's last pixel, the table is read out over as many cycles as
labels were opened. Every live record appears on `comp_*`, and `frame_done`
pulses at the end.

`sign_detector` applies the rule to each record, without division:
`class == 1`, `area > 200`, `10*w > 7*h` and `w < 3*h`, where w and h are the
bounding-box width and height. The lower ratio bound keeps the hole inside a
yellow "0" digit from being taken for a sign. Signs appear on `sign_*` one
cycle after their record.

## Streams, latency and blanking

The camera interface is `pix_valid`, `pix_sof` (first pixel of a frame),
`pix_cb` and `pix_cr`. Gaps (`pix_valid` low) are allowed anywhere inside a
frame. Latencies below count clock edges: L cycles means visible right after
the L-th edge, counting the one that took the input.

| point | latency from camera pixel (no gaps) |
|---|---|
| `seg_*` (class) | (W+3) + 3*D + ceil(log2 C) = W+11 |
| `med_*` | 2*(W+3) + 8 |
| `lab_*` | 2*(W+3) + 9 |

Between the last pixel of one frame and the first of the next, the source
must stay idle while each filter flushes its last row (W+1 cycles) and while
the feature table is read out (up to LABELS+2 cycles). A gap of

    2*(W+1) + 3*D + ceil(log2 C) + LABELS + 8   cycles

(= 3042 at the defaults) always suffices, since it covers all of these one
after the other. Assertions in `window3x3` and `feature_extract`
fire if the blanking is too short. At 170 MHz, the speed reported for the
published classifier, a 1000 x 630 frame with this blanking takes 633 042
cycles, about 268 frames per second.

Class centres are written through `cfg_wr/cfg_addr/cfg_data`, with cell
`class*2 + dim` (dim 0 = Cb). This must happen while no frame is in flight.
The classifier keeps running during writes, and the top masks its valid flag
while `cfg_wr` is high.

## Parameters

| parameter (module) | default | origin |
|---|---|---|
| `W`, `H` (all stream stages, top) | 1000, 630 | image size of the published evaluation |
| `R` (`mdc`, `gauss3x3`, top) | 8 | 8-bit chroma, chosen here |
| `D` (`mdc`) | 2 | Cb and Cr, published; fixed at 2 in the top |
| `C` (`mdc`, top) | 4 | published class count |
| cell width `R+2` (`mdc`) | 10 | published (two guard bits) |
| `LABELS` / `NLABELS` | 1024 | chosen here |
| `MIN_AREA`, ratio 7/10 and 3, sign class 1 (`sign_detector`) | 200, 0.7, 3, yellow | published rule |

Shared constants, including the class centres, are in `rtl/rsd_pkg.sv`.

## What is published and what is chosen here

Taken from the publication:

* the stage order;
* the L1 minimum distance classifier, with its memory-like interface;
* the flat register-file layout (class-major, dimension-minor);
* the C parallel distance pipelines of D three-cycle processes, accumulating
  into the first buffer cell;
* the R+2-bit cells;
* the registered pairwise minimum tree, and the latency 3*D + ceil(log2 C);
* the P1/P2/P3 neighbourhood;
* the extra pixel line buffer beside the label line buffer;
* the sign rule and its thresholds;
* the image size, the class centres and the 4 classes.

Chosen here, because the publication names these parts without giving their
insides:

* the Gaussian kernel weights and rounding;
* how the median is computed;
* border handling, which is pass-through;
* the stream framing, the self-flushing filters and the blanking requirement;
* the labeling decision rules;
* the flat equivalence table and its parallel rewrite on merge;
* the label count and the overflow behaviour;
* the record layout of the feature table and its end-of-frame read-out;
* the use of bounding-box width and height in the ratio test;
* the tie rule of the classifier (lowest index);
* which operation falls in which of the three cycles of a process;
* `en` stalling everything, with writes also gated by `en`;
* where the programming data sits on the input port;
* synchronous active-low resets.

The published figure of the labeler's buffers shows a register in front of a
FIFO of length Nc. Here, the register and the FIFO are merged into one
column-indexed buffer of W entries, so that P1 is exactly the pixel above P3.

Not part of this RTL: the camera, which is the stream source, and the offline
procedure that chose the class centres.

## Verification

Every testbench is self-checking. It ends with a line
`TB_RESULT checks=N failures=M` and contains a watchdog. The expected values
come from `tb/rsd_ref_pkg.sv`, a behavioural model of every stage: direct
convolution, L1 nearest centre, sorting median, flood-fill components, and
the sign rule in real arithmetic.

| testbench | what it checks |
|---|---|
| `tb_mdc_regfile` | random writes, with writes blocked by `en`/`wr`/out-of-range address; all parallel outputs |
| `tb_mdc_distance_pipe` | L1 distance at exactly 3*D enabled cycles for D=2 and D=4, random stalls, extreme values |
| `tb_mdc_min_select` | C=4 and C=5 (pass-through buffer), tie-heavy inputs, lowest-index tie rule, latency |
| `tb_mdc` | published centres programmed through the port; random, near-centre and exact-centre vectors; latency 8 (and 12 for R=6, D=3, C=5) under stalls |
| `tb_gauss3x3`, `tb_median3x3` | every output pixel, sof/eof, frames with gaps, flush, latency W+3 |
| `tb_mcl_labeler` | the components found equal flood fill exactly; label count; merges; overflow on the frames that need more than 8 labels |
| `tb_feature_extract` | records equal flood-fill components (class, area, box); read-out length |
| `tb_sign_detector` | every edge of the rule (area 200/201, ratio exactly 0.7 and 3) plus random records |
| `tb_road_sign_detector` | end to end at 64 x 48 with 64 labels, over three frames (see below) |
| `tb_road_sign_full` | two full 1000 x 630 frames at the default parameters, same checks (about 2 s of simulation) |
| `tb_component_reduction` | one full-size frame with strong chroma noise (+/-12 on Cb and Cr), same checks; the filtered component count must be at least 90% below that of the same scene classified without filters |

In the end-to-end testbenches, `rsd_tb_env` draws a synthetic road scene:

* a noisy grey background;
* a yellow square inside a red ring;
* a patch of the second red;
* a long yellow bar and a small yellow patch, which the rule must reject;
* a yellow U shape, which forces label merges;
* isolated noise pixels.

It compares the classifier stream and the median stream pixel by pixel,
checks the component records and the detected signs as sets, and checks one
pixel per clock and the stage latencies. It also counts how often each
mechanism happened: centre writes, Gaussian changes, each class, median
changes, merges, accepted and rejected components, and label overflow on a
pure-noise frame. It fails if any of them never happened.

For each frame the checker also reports how many 4-connected components the
scene would give if it were classified without the two filters. In
`tb_component_reduction` the noisy full-size scene gives about 15000
components unfiltered against fewer than 300 filtered, a reduction of about
98%. For real road images the reduction reported is about 95%, from a few
thousand components (up to about 7300) to a few hundred (up to about 415).
The filtered scene opens about 460 of the 1024 labels.

To run one testbench with Verilator from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/rsd_pkg.sv tb/rsd_ref_pkg.sv tb/tb_mdc.sv --top-module tb_mdc
./obj_dir/Vtb_mdc
```

Replace `tb_mdc` with any testbench name. `-y rtl -y tb` lets Verilator find
each module in the file of the same name.

## How far to trust it

The RTL is checked in simulation against an independent model, at both small
and full size. It has not been run on an FPGA, and timing has not been closed
for any device. Some parts are likely to be the slowest paths:

* the labeler's single-cycle path: row-buffer read, table lookup, compare, and
  the parallel table rewrite;
* the median's 81 comparators.

Both would need pipelining for a fast clock. The synthetic scenes are not
camera images, so detection quality on real roads is not measured here. It
depends on the class centres, the lighting and the rule, not on the RTL.

## Files

`rtl/`:

| file | contents |
|---|---|
| `rsd_pkg.sv` | shared constants |
| `mdc_regfile.sv` | classifier register file |
| `mdc_distance_pipe.sv` | distance pipeline |
| `mdc_min_select.sv` | minimum tree |
| `mdc.sv` | classifier |
| `window3x3.sv` | 3x3 window generator |
| `gauss3x3.sv` | Gaussian filter |
| `median3x3.sv` | median filter |
| `mcl_labeler.sv` | multi-class labeler |
| `feature_extract.sv` | feature table |
| `sign_detector.sv` | sign rule |
| `delay_line.sv` | delay line |
| `road_sign_detector.sv` | top level |

`tb/`: one `tb_<module>.sv` per module. In addition, `rsd_ref_pkg.sv` holds
the reference model, `rsd_tb_env.sv` the end-to-end stimulus and checker, and
`tb_road_sign_full.sv` and `tb_component_reduction.sv` the full-size runs.
