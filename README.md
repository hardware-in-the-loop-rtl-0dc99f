# Landing-marker detector for a SoC FPGA: streaming RTL

A drone lands autonomously on a marker: a thick black ring with a black square and a black
rectangle inside it, on a white ground. A downward camera delivers 1280 x 720 colour frames
at 60 frames per second. The programmable logic of a Zynq-class SoC turns every frame into a short
list of dark objects, each with its area, bounding box and centroid. The ARM processor
then looks through this list for the ring, square and rectangle. From them it works out where
the marker is and how it is rotated, and from that it computes the speed commands for the
drone. In the hardware-in-the-loop setup the pictures come from a flight simulator on a PC,
over HDMI, instead of from a camera.

This repository holds the programmable-logic part as synthesizable SystemVerilog. It has four
streaming stages that each take one pixel per clock:

```
 RGB 24 bit ──► rgb2gray ──► gauss_blur ──► adaptive_thresh ──► ccl ──► object records
 (HDMI in)       8 bit         8 bit            1 bit mask  │            (to the processor)
                                                            └──► mask out (for a display)
```

The top module is `vision_top`. The HDMI receiver and transmitter, the processor and its
software, and the USB serial link to the simulator are not part of the RTL: their signals are
ports of `vision_top`.

What the source publication specifies is the order and purpose of the stages:
- grey conversion, then a Gaussian low-pass filter;
- adaptive thresholding from block means with bilinear interpolation of the threshold;
- connected-component labelling that reports area, centroid and bounding box;
- real-time operation at 1280 x 720 @ 60 fps.

Everything below that level is this design's own choice. That covers the kernel, the block
size, the threshold formula, the labelling algorithm, table sizes, number formats and
interfaces. Each choice is marked as such below and in the header comment of each file.

## Video stream

All stages use the same stream:

| signal  | meaning |
|---------|---------|
| `valid` | a pixel is present in this clock |
| `sof`   | first pixel of a frame (with `valid`) |
| `eol`   | last pixel of a line (with `valid`) |
| data    | 24-bit `{R,G,B}`, 8-bit grey, or 1-bit mask |

There is no back-pressure. As with a camera, pixels must be taken when they come. `valid` may
drop for any number of clocks between pixels. Each stage counts columns and lines itself with
`pix_counter`, using the `WIDTH` and `HEIGHT` parameters (1280 and 720 by default). A `sof`
forces the count back to (0, 0). `rgb2gray`, `gauss_blur` and `adaptive_thresh` each delay the
stream by exactly one clock, so the mask leaves `vision_top` 3 clocks after the video enters.

At the standard 720p60 timing the pixel clock is 74.25 MHz. Each frame is 1650 x 750 clocks,
of which 30 lines are vertical blanking, or 49,500 clocks. The labelling stage does its
end-of-frame work in that blanking time.

## The filtering stages

**rgb2gray**: grey = (77 R + 150 G + 29 B) >> 8. These are the BT.601 luma weights in 8-bit
fixed point. The choice of weights is this design's.

**gauss_blur**: a 3 x 3 binomial kernel (1 2 1 / 2 4 2 / 1 2 1)/16, rounded to nearest.
- Two line buffers of `WIDTH` bytes hold the previous two lines.
- Two column registers hold the previous two columns.
- When pixel (x, y) arrives, the window covers columns x-2..x and lines y-2..y. The output sent
  with that pixel is therefore the filtered value centred on (x-1, y-1): the filtered picture is
  shifted by one pixel right and one line down. In return the stream keeps its timing, and
  nothing has to be produced after the last input line.
- Taps left of column 0 or above line 0 repeat column 0 or line 0.

## Adaptive thresholding

A single global threshold fails under uneven lighting, so the threshold follows the local
brightness:

1. The frame is cut into non-overlapping 16 x 16 squares: 80 x 45 squares at 1280 x 720.
   A running sum is kept for each square of the current row of squares (80 accumulators).
   On the last pixel of a square, its threshold max(mean - `OFFSET`, 0) is written to a
   table. The mean is sum >> 8 and `OFFSET` is 8.
2. Each pixel gets its own threshold, interpolated bilinearly between the thresholds of the
   four nearest square centres (centres at 8, 24, 40, ...):

   ```
   fx = x - 8,  i = fx / 16,  a = fx mod 16        (likewise fy, j, b)
   T  = ((16-a)(16-b) T[j][i] + a(16-b) T[j][i+1] + (16-a) b T[j+1][i] + a b T[j+1][i+1]) >> 8
   ```

   Outside the grid of centres (within 8 pixels of the frame edge) the index is clamped to the
   edge square, with weight 0.
3. The mask bit is 1 when grey < T. The marker is dark, so objects are dark pixels.

A square's threshold is only known after its last line has passed. The pixel being
classified therefore uses the thresholds of the **previous frame**. The table has two banks
that swap at every `sof`. Until one whole frame has been seen after reset, the mask is all
zero. At 60 frames per second the scene hardly moves between frames.

Where this matters: the interior of a dark area much wider than a square is no darker than
its own square's mean. It therefore does not pass the threshold, and such an area comes out as
its outline. This is the usual behaviour of block-mean thresholding, and the 16-pixel square
sets the scale. The full-size test shows it: a ring 50 pixels thick gives two objects, its
outer and its inner edge. `BLK` (any power of two that divides both frame sizes) and `OFFSET`
are parameters.

## Connected-component labelling (`ccl`)

This is the hardest part. It has to find 8-connected objects in a stream it sees only once,
at one pixel per clock, with memory for one line only.

### During the frame

Each object pixel gets a *provisional label* from the neighbours that have already been seen:
L (left), and P, Q, R (upper-left, up, upper-right). P, Q and R come from a one-line label
buffer. Q and R are read at columns x and x+1, and P is Q from the clock before.
- If L is labelled, the pixel takes L's label.
- Otherwise it takes Q's, then P's, then R's, whichever is labelled first.
- If no neighbour is labelled, it gets a fresh label (1, 2, 3, ...). Label 0 means background.

Labels are never rewritten. When a pixel touches two different labels, the pair is
appended to an *equivalence list*. One append per pixel is always enough:
- if L is labelled, it is already known to be equivalent to P and Q (through earlier pixels),
  so only R can bring a new label, and only when Q is background;
- if L and Q are both background, the only new pair possible is P with R.

A pair equal to the previous one appended is not appended again.

Every object pixel adds itself to the feature record of its label: area, sum of x, sum of y,
and min/max of x and y. This is a single-clock read-modify-write of a table indexed by label,
so a run of pixels with the same label needs no forwarding logic.

### After the frame

The final pixel of the frame starts three sweeps. They run during the vertical blanking.

1. **Union.** For every recorded pair, both labels are followed through a `parent` table to
   their roots, one step per clock for both in parallel. The larger root is then linked
   under the smaller one. As a result parent[l] <= l always holds, and the root of an object is
   its smallest label, which is the label of its first pixel in raster order.
2. **Flatten and merge.** For l = 1, 2, ... every non-root label takes
   root = parent[parent[l]]. This is its root in one step, because its parent is smaller and was
   flattened before it. The label then adds its feature record into the root's record.
3. **Output.** Each root, in increasing label order, becomes one record. Records therefore
   appear in raster order of each object's first pixel. Two restoring dividers (12 clocks)
   compute the centroid floor(sum / area). The record is held on `obj_valid` until `obj_ready`.
   After the last record `frame_done` pulses with `obj_count`.

A record (`vision_pkg::obj_t`) holds area (24 bits), xmin, xmax, ymin, ymax, cx and cy (12 bits
each).

### Limits and their flags

| condition | effect | flag (stays valid until the next frame starts) |
|---|---|---|
| more than `MAX_LABELS`-1 = 511 fresh labels in a frame | later objects that would need a new label are not reported | `lab_overflow` |
| more than `EQ_DEPTH` = 512 equivalences | some objects may be reported in pieces | `eq_overflow` |
| a frame starts while the previous one is still being resolved or sent | that frame is ignored by `ccl` (the other stages still process it) | `frame_dropped` pulse |

Resolution time is roughly:
- the number of pairs times the length of the union-find paths;
- plus one clock per label;
- plus about 16 clocks per object, plus the time the receiver holds `obj_ready` low.

For the marker scene at full size this came to 822 clocks, far below the 49,500 clocks of
blanking. A very noisy mask with hundreds of objects takes longer, and a receiver that
stalls long enough will cause the next frame to be dropped. The table sizes (512 labels,
512 equivalences) are this design's choice. The source publication gives none.

## Files

| file | content |
|---|---|
| `rtl/vision_pkg.sv` | widths, `obj_t` record, feature record and its merge function |
| `rtl/pix_counter.sv` | raster position of the current pixel |
| `rtl/rgb2gray.sv`, `rtl/gauss_blur.sv`, `rtl/adaptive_thresh.sv`, `rtl/ccl.sv` | the four stages |
| `rtl/seq_div.sv` | restoring divider used for the centroid |
| `rtl/vision_top.sv` | the chain of the four stages |
| `tb/vision_ref_pkg.sv` | whole-frame reference models of every stage and a synthetic marker scene |
| `tb/tb_*.sv` | self-checking testbenches, one per stage, plus two for the top |

Tables are memories written as arrays with asynchronous reads, which map to distributed RAM
on an FPGA. The threshold table has four read ports (the four interpolation corners). At the
default size the design has about 180 kbit of memory.

## Verification

Every testbench compares the RTL with the reference models in `tb/vision_ref_pkg.sv`. These
models are written independently of the RTL: whole-frame loops and a flood fill. Each
testbench prints `TB_RESULT checks=N failures=M`.

| testbench | what it covers |
|---|---|
| `tb_rgb2gray` | corner colours and 2000 random pixels, flags and idle cycles |
| `tb_gauss_blur` | random frames, an edge and stripes, with idle cycles; every pixel compared |
| `tb_adaptive_thresh` | empty first frame, then three frames with a gradient, dark patches and noise, against previous-frame thresholds |
| `tb_ccl` | random masks of several densities, U shapes, a comb, a square spiral (chained merges), a ring and diagonal staircases; records compared in order under random `obj_ready`; frame drop; label and equivalence overflow on a small instance |
| `tb_vision_top` | 160 x 96 frames of the marker through the whole chain: mask and records compared; counts and requires an empty first frame, carried thresholds, label merges, back-pressure, a dropped frame and label overflow |
| `tb_vision_full` | default parameters (1280 x 720): two frames, mask and records compared; resolution time checked against the 49,500-clock blanking |
| `tb_vision_720p60` | default parameters, four consecutive frames with the real 1650 x 750 clock timing, the marker growing as the drone descends; every frame must be resolved before the next begins, none dropped, records compared |

Each one runs with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/vision_pkg.sv tb/vision_ref_pkg.sv tb/tb_vision_full.sv --top-module tb_vision_full
./obj_dir/Vtb_vision_full
```

The full-size test takes a few seconds, the 720p60 test about 15 seconds.

Not verified: timing closure at 74.25 MHz on an FPGA, operation on real HDMI video, and the
processor side that receives the records.

## Where this departs from, or goes beyond, the source

- The blur output is shifted by one pixel right and one line down against the input. The
  reported coordinates (bounding box, centroid) are therefore one pixel right and one line
  down of the true position. Subtract 1 if that matters.
- Thresholds come from the previous frame.
- Kernel, block size, `OFFSET`, grey weights, labelling algorithm, connectivity, table sizes,
  record format and all handshakes are this design's choices.
- The visualisation output is only the raw binary mask. How the detected shapes are drawn
  for the monitor is not specified by the source, and is not implemented.
