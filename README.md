# A streaming BING region-proposal accelerator in SystemVerilog

Object detectors first need *region proposals*: a few hundred to a thousand
boxes that probably contain an object. BING ("binarized normed gradients")
finds them cheaply. The image is resized to many sizes so that every
candidate box becomes an 8x8 window. Each window of the gradient map is
scored by a linear SVM. Only the best window of each small neighbourhood is
kept. The best windows of each size are ranked, rescaled per size, and ranked
again over all sizes.

Almost nothing in this computation branches, so it maps onto a dataflow
pipeline. Pixels enter once, in a fixed order. Every stage keeps only the
few rows it still needs, and a window's score leaves as soon as its last
pixel has arrived. This RTL builds such a pipeline. It follows the structure
of the FPGA accelerator published by Fu, Yang, Dai, Chen and Zhao ("A
Scalable Pipelined Dataflow Accelerator for Object Region Proposals on FPGA
Platform"). That accelerator was written in C for high-level synthesis. The
paper gives its structure and arithmetic but not its RTL, so much of the
detail here is this design's own. The sections below say which is which.

## Dataflow

```
 image_bank ──► resize_module ──► kernel_compute ───────────────► stream_fifo ──► heap_sort (I) ──► svm2 ──► heap_sort (II) ──► proposals
 (4 blocks)     4 workers,        calc_grad ► svm1 ► nms                           top-N per scale    per-scale   top-K over
                Ping-Pong cache                                                                      calibration all scales
```

`bing_top` joins these blocks and adds a sequencer. The host writes the
original image, the 64 SVM-I weights and a table of scales, then pulses
`start`. For every scale in turn the sequencer:

1. starts the resize module;
2. waits until NMS has passed the last batch, the FIFO is empty and
   heap sort-I is idle;
3. drains heap sort-I through SVM-II into heap sort-II.

After the last scale, heap sort-II is drained on the `prop_*` stream and
`done` pulses. A proposal is `{score, scale, row, col}`: the top-left corner
of an 8x8 window in the resized image of that scale. Turning it into a box
in the original image is left to the host. The paper calls this "post
processing" and does not describe it.

### The batch

Every stage works on *batches*. A batch is four vertically neighbouring
pixels of one column. The resized image is cut into *banks* of four rows.
Batches are streamed column by column through a bank, then bank by bank.
The four lanes of a batch are the accelerator's four parallel pipelines.
Each stage handles a whole batch per cycle: four gradients, four window
scores, four NMS lanes. The stages are pipelined, so consecutive batches
overlap. Widening the batch is how the paper scales the design. In this RTL
the number of lanes is the package constant `NPIPE = 4`. The kernel is
written in loops over it, but the resize module's rotation is built for
exactly four.

## Resize: rotation loading and the Ping-Pong cache

This is the least obvious part of the design. The resized image is produced
by nearest-neighbour sampling: resized pixel `(r,c)` is original pixel
`(floor(r*step_y), floor(c*step_x))`. The steps are unsigned Q8.16 values
from the scale table.

The original image sits in four single-port memories ("blocks"). The pair of
columns `2m, 2m+1` goes to block `m mod 4`, as in the paper's example
figure. One memory port allows one fetch per block per cycle. The resizer
still has to emit four pixels, a whole batch, every cycle. Two mechanisms
make this possible:

* **Workers and rotation.** The resized image is walked in 4x4 tiles: four
  rows of a bank by four columns. Worker `w` (0..3) owns column `4t+w` of
  tile `t`. In load slot `s` it fetches row `(w+s) mod 4` of that column. It
  writes the pixel into part `(w+s) mod 4` of a cache lane, at entry `w`. In
  every slot the four workers therefore write four different parts, so each
  part needs only one write port. With the paper's example (ratio 1/2),
  worker 0 loads rows 0,1,2,3, worker 1 loads rows 1,2,3,0, and so on. Each
  worker stays on its own block.
* **Two cache lanes.** A filled lane is exported as four batches: column `e`
  takes entry `e` from each of the four parts. Meanwhile the other lane is
  filled. A lane may be refilled from the cycle in which its last batch
  leaves, because the first write lands a cycle later. So, once running,
  the module delivers one batch per cycle with no gaps. The testbench
  checks this: 96 batches in 96 cycles.

The paper's example uses ratio 1/2 and never has two workers reading the
same block. Other ratios can have such conflicts. The paper does not say
how they are handled. Here, the lowest-numbered worker that wants a block
gets it, and the slot takes an extra cycle for each further worker on that
block. Each such cycle pulses `conflict`. The output stays correct; only the
rate drops. At ratio 1/1.5 the stream ran at about half rate in simulation.

Resized widths and heights must be multiples of 4 and at least 8. An
assertion checks this when a scale starts.

## Kernel: gradient, SVM-I and NMS on a stream

**Gradient (`calc_grad`).** The distance between two pixels is the largest
absolute difference of their R, G and B channels. `Ix` is the distance
between the pixels above and below, `Iy` the distance between the pixels
left and right. The gradient is `G = min(Ix+Iy, 255)`. The bottom neighbour
of a bank's last row is the first row of the *next* bank, so bank `b-1`'s
gradients are computed while bank `b` arrives. A line buffer keeps, for each
column, the previous bank's four rows plus the row above them. A
two-column register window supplies the left and right neighbours.

This costs two kinds of idle input cycle:

* one end-of-line cycle after each bank except the first, to emit the last
  column;
* one flush bank after the last bank, replayed from the line buffer.

During these cycles `in_ready` is low. At image borders the missing
neighbour is taken to be the border pixel itself. The paper does not say how
it handles borders.

**SVM-I (`svm1`).** The score of a window is `s = sum G(r+dy, c+dx) * W[dy*8+dx]`.
The weights are 8-bit signed and taken row by row. A line buffer keeps the
last seven gradient rows of each column. With the four new rows this gives
an 11-row column. An 8-column window of such columns holds the four windows
whose bottom row lies in the current bank. Lane `k` of the output is the
window with top row `4*bank-7+k` and left column `col-7`. Lanes above the
image are flagged invalid. As in the paper's pipeline diagram, there are two
stages. The first forms the 32 row products ("1x8"). The second adds eight
of them per lane ("8x8"). Scores are 24-bit signed.

**NMS (`nms`).** The score map is cut into non-overlapping 5x5 blocks, and
only the best window of each block survives. As in the paper, this takes
two steps. A per-lane running maximum over five columns gives `max1x5`. A
per-block-column line buffer keeps the running maximum of those over the
block's rows. When a block's bottom row passes, its winner is emitted. Four
consecutive rows contain at most one block bottom row, so at most one
candidate leaves per cycle. Most cycles emit none.

The choice of non-overlapping blocks is this design's reading of the paper's
"each 5x5 block". Blocks cut by the right or bottom edge are dropped. On a
tie, the earlier window in raster order wins.

**Stall.** All three stages and their line buffers advance on one enable,
`en`, which is the FIFO's `in_ready`. When heap sort-I falls behind and the
FIFO fills, the whole kernel freezes. Nothing is in flight that could be
lost. The resize module then waits on its ready signal.

Latency: from the last input batch of an image to `done` takes one
end-of-line cycle, a flush bank of `width` cycles, its end-of-line cycle and
3 pipeline cycles. A `height x width` image with `nb = height/4` banks takes
`nb*width + nb + width + 3` kernel cycles. The testbench checks this.

## Sorting: the bubble-pushing heap

`heap_sort` keeps the K largest items it has seen, in a min-heap whose root
is the smallest item kept. Its slots start out "empty", which counts as
smaller than any item. An arriving item that is larger than the root takes
the root's place. It is then pushed down one level per cycle, swapping with
the smaller child, until both children are larger. A smaller item is
dropped in one cycle.

The push-down is pipelined by level. Each tree level has its own stage,
which looks only at its own node and that node's two children. A new
operation may therefore enter two cycles after the previous one, while the
earlier one is still sinking. The two-cycle spacing keeps a new operation
from reading a level that the previous one is about to write. Accepting an
item costs two cycles at most, whatever the heap size, and NMS emits at most
one candidate every five cycles. So heap sort-I keeps up with the kernel.
The kernel stall described above therefore does not occur in normal runs.
It is kept for slower sorters or wider kernels, and the end-to-end
testbench provokes it by briefly holding heap sort-I's ready low.

To drain the heap, the root is output and replaced by a "retired" marker
that counts as larger than everything, and the marker is pushed down. Items
therefore leave in ascending order, and empty slots are skipped. The paper
states only the method and points to an existing dual-port heap sorter. The
per-level stages and the two-cycle spacing are this design's choices. A pop
also needs two cycles, so draining N items takes about 2N cycles.

* Heap sort-I keeps `TOP_N = 130` windows per scale. The paper gives no
  number; 130 is the per-size count of the public BING code.
* Heap sort-II keeps `TOP_K = 1000`, the proposal count the paper chose.

**SVM-II (`svm2`)** rescales each scale's scores, `s2 = ((v*s) >>> 8) + t`,
so that windows from different sizes can be ranked together. `v` is a
signed Q8.8 gain and `t` a signed offset, both from the scale table. The
linear form follows BING; the paper only names the stage.

## Sizes and parameters

| parameter | default | origin |
|---|---|---|
| pipelines (`NPIPE`) | 4 | paper |
| SVM window / NMS block | 8x8 / 5x5 | paper |
| `TOP_K` | 1000 | paper |
| `TOP_N` | 130 | BING software, not the paper |
| image store (`IMG_MAX_W` x `IMG_MAX_H`) | 512 x 512 | chosen: fits VOC2007 images (at most 500 a side) |
| `MAX_W` (widest resized image) | 256 | chosen: BING's 16-pixel windows on a 500-pixel image give 250 |
| `NUM_SCALES` | 36 | chosen: BING's 6x6 window sizes |
| `FIFO_DEPTH` | 64 | chosen |
| weights / gradient / score widths | 8 s / 8 u / 24 s (SVM-II 32 s) | chosen; the paper mentions only an unspecified quantisation |

Throughput estimate. Take a 500x375 image and the 36 BING sizes, rounding
each resized image to multiples of 4. Count the kernel cycles and the
drain of a full heap sort-I per scale (about 260 cycles). With no block
conflicts this gives about 59,000 cycles per image. The paper's 1,100
frames/s at 100 MHz allow about 91,000. Block conflicts at ratios other than
1/2 slow the resize stage. At half rate the kernel part alone would grow from
about 49,000 to about 99,000 cycles, so heavy conflicts are the main reason
this RTL could fall short of that rate. Scales also run one after another here, with no overlap.

## Differences from the published accelerator

* The published design came from high-level synthesis, and its schedules,
  memories and interfaces are not published. Everything above marked as a
  choice is this design's.
* Resize bank conflicts are serialised. The paper shows only a
  conflict-free example.
* Heap sort takes one operation every two cycles, not one per cycle. A
  dual-port heap like the one the paper cites could reach one per cycle.
* The heap's slots are one array that every level stage reads
  combinationally at two child addresses. Synthesis therefore builds it from
  registers and multiplexers, not block RAM. A block-RAM heap would keep one
  memory per level and fetch the children a cycle ahead.
* No overlap between scales. The next scale starts only after heap sort-I
  has been drained.
* Edge blocks of the NMS grid are dropped.

## Files and simulation

`rtl/` holds one module or package per file:

* `bing_pkg` holds the types (`rgb_t`, the batch structs, `cand_t`,
  `prop_t`, `scale_cfg_t`) and the gradient function.
* The other modules are `image_bank`, `resize_module`, `calc_grad`, `svm1`,
  `nms`, `kernel_compute`, `stream_fifo`, `heap_sort`, `svm2` and
  `bing_top`.

`tb/` holds a self-checking testbench `tb_<module>` for each module, plus
the end-to-end `tb_bing_top` at reduced sizes and `tb_bing_top_full` at the
default sizes. `tb_bing_top_full` runs a 500x375 image at six scales; it
takes about 36,000 cycles and a few seconds. The expected results come from
`tb/bing_ref_pkg.sv`, a whole-array software model of the same arithmetic.
Each testbench prints `TB_RESULT checks=N failures=M`.

```
verilator --binary --timing --assert -Irtl -Itb rtl/bing_pkg.sv tb/bing_ref_pkg.sv \
    -y rtl -y tb tb/tb_bing_top.sv --top-module tb_bing_top -o sim
./obj_dir/sim
```

Swap in any other testbench name the same way.
