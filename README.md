# Real-time video quality metrics in hardware

This RTL computes four no-reference video quality indicators for every frame
of a video stream, fast enough for 8K video at 30 frames per second:

* **blockiness** - how visible the 8x8 coding-block borders are,
* **exposure** - whether the frame is too dark or too bright,
* **blackout** - whether the frame is one uniform colour,
* **interlace** - how many small areas show the comb pattern of misaligned half-frames.

The host sends the video already cut into 4x4 "microblocks", one per 128-bit
stream word, and gets back one 128-bit results word per frame. The expensive,
pixel-rate part of every metric is done in hardware; the two divisions that
remain (IntraSum/InterSum for blockiness, count/microblocks for interlace)
are left to the host, once per frame. All four metrics read the same
microblock in the same clock cycle, and blackout reuses the exposure unit's
sorted block sums, so the design costs little more than one metric.

The metric definitions and the hardware formulations follow the FPGA video
quality module of Wielgosz, Karwatowski, Pietroń and Wiatr ("FPGA
implementation of the procedures for video quality assessment"), which was
written in a C-based high-level synthesis language. This is an independent
register-transfer description of that design; where it had to choose, it says
so below and in each file's header.

## The data layout is the design

Everything hinges on the order in which the host sends pixels.

**Shifted blocks.** The blockiness metric compares pixels across the border
between one 8x8 block and its right and lower neighbours. To keep every
needed pixel inside one transfer unit, the host drops the first row and the
first column of the frame and cuts the rest into 8x8 blocks. Each of these
*shifted* blocks therefore straddles the original block borders: the border
to the right lies between its local columns 6 and 7, the border below between
its local rows 6 and 7. A W x H frame gives BLX = (W-1)/8 by BLY = (H-1)/8
shifted blocks (integer division); leftover pixels at the right and bottom are
not sent.

**Microblocks.** Blocks go in raster order. Each block is sent as four
microblocks: top-left, top-right, bottom-left, bottom-right. Inside a
microblock the 16 samples are numbered column by column:

```
          col0 col1 col2 col3
   row0    p1   p5   p9  p13
   row1    p2   p6  p10  p14
   row2    p3   p7  p11  p15
   row3    p4   p8  p12  p16
```

Sample p(k) is byte k-1 of the word (p1 in bits 7:0). Column-wise numbering
makes the interlace test a set of comparisons between neighbouring samples
p(4c+1)..p(4c+4) of one column.

**Stream protocol.** Each lane's input stream is:
one header word (bits 15:0 width, bits 31:16 height, in pixels), then
4*BLX*BLY microblock words per frame, frame after frame with no separator,
and finally an *eos* beat (the stream is closed). After eos a new header may
start a new stream at a different resolution. A header that yields no whole
block is ignored.

## Results word

One word per frame, bit positions as in the original design:

| bits    | field                                       |
|---------|---------------------------------------------|
| 127     | blackout (1 = uniform frame)                 |
| 126:104 | unused, zero                                 |
| 103:96  | exposure: mean luminance of 8 extreme blocks |
| 95:64   | interlace: number of interlaced microblocks  |
| 63:32   | blockiness InterSum                          |
| 31:0    | blockiness IntraSum                          |

The host computes blockiness = IntraSum / InterSum and
interlace ratio = count / (4*BLX*BLY). When a stream is closed, one extra word
with `eos` set and zero data follows the last frame's results.

## The four metric units

**Blockiness (`vq_blockiness`).** Per shifted block, 12 *inter* differences
across the block border and 12 *intra* differences between the two pixels just
inside it, on lines 0, 1, 2, 3, 4 and 7 of the block in both directions.
Which microblock supplies which terms (microblock position = microblock
number modulo 4, counted from 1):

| position | terms |
|----------|-------|
| 1, top-left     | none |
| 2, top-right    | rows 0-3: intra abs(p9-p5)..abs(p12-p8), inter abs(p9-p13)..abs(p12-p16) |
| 3, bottom-left  | columns 0-3: intra abs(p2-p3) etc., inter abs(p4-p3) etc. |
| 0, bottom-right | row 0 and row 3 horizontally, column 0 and column 3 vertically |

A frame's IntraSum and InterSum are the sums of these over all blocks.

**Exposure (`vq_exposure`).** The 64 samples of each block are summed (16
bits). The sums go through two sorted insertion lists of four entries: the
four smallest (restarting from 16384 each frame, above any real sum) and the
four largest (restarting from 0). At the end of the frame the eight sums are
each shifted right by 2, added, and the total shifted right by 7. This is
their total divided by 8 x 64 = 512, the mean pixel value of the eight
extreme blocks, in one byte. A frame with fewer than four blocks keeps some
start values in its lists, as the original does.

**Blackout (`vq_blackout`).** 1 unless (largest block sum - smallest block
sum) > 4. It is only a subtractor and a comparator on the exposure unit's
outputs.

**Interlace (`vq_interlace`).** A microblock counts when, in all four columns,
row 0 > row 1 < row 2 > row 3, or when all twelve comparisons hold the other
way round. Equal samples never count.

## Pipeline and timing

`vq_frame_ctrl` registers each word as a tagged microblock (first/last of the
frame, position in the block). Blockiness and interlace register a per-microblock
partial result, then accumulate: their frame result is ready 2 cycles after the
frame's last microblock. Exposure sums the microblock, then the block, then
updates its lists: 3 cycles. `vqfpga` holds the earlier results and writes the
results word when the exposure result arrives. Every unit restarts its sums
on the first microblock of a frame, so frames run back to back with no gap.

One enable, `en`, moves the whole pipeline. It is high when the output
register is empty or being read, and `in_ready` equals `en`. A full output
stream therefore stalls the input, and no result is lost.

Throughput is one word per clock per lane, i.e. one 8x8 block every four
clocks. With no stalls, the results word is valid at the `vqfpga` output 4
clocks after the clock edge that took the frame's last word. An 8K frame is
2,067,604 words, so one lane meets 30 frames/s above 62 MHz.

`vq_top` puts `N_VQ` = 6 independent lanes side by side, each an input
`vq_stream_fifo`, a `vqfpga` and an output `vq_stream_fifo`, as in the
original six-way build. The host link (PCIe endpoint and stream adapters) is
outside this RTL; each lane's valid/ready/data/eos signals are top-level ports.

## Where this RTL departs from, or adds to, the original description

* The original equations and its hardware listings differ in three places.
  This RTL follows the hardware listings each time:
  * Blockiness: the equations name other pixel positions, on unshifted blocks,
    than the shifted-block listing does.
  * Exposure: the equations average 3 + 3 extreme blocks, the hardware 4 + 4.
  * Blackout: the equation reports no blackout when the difference is *at
    least* the threshold, the listing when it is *greater than* it.
* The exposure text speaks of a left shift by nine bits. A division by 512
  (right shifts) is meant and implemented.
* The original shows only the minimum-list insertion. The maximum list here
  is its mirror image.
* The following are this design's own choices:
  * the header layout and the block count (W-1)/8 x (H-1)/8;
  * the byte order within a word;
  * the eos handling;
  * the valid/ready handshakes and the pipeline;
  * the FIFO depth (4).
* The original sums blockiness only over inner blocks (x, y = 2..BLX-1) in
  its equation. Its hardware, and this RTL, sum every block that is sent.
* The 32-bit sums cannot overflow at 8K. At the hypothetical 16K resolution,
  extreme content could wrap them.

## Files and simulation

`rtl/` holds one module or package per file:

* `vq_pkg`: word layouts and constants;
* `vq_stream_fifo`, `vq_frame_ctrl`;
* the metric units `vq_blockiness`, `vq_exposure`, `vq_blackout` and `vq_interlace`;
* `vqfpga` (one lane) and `vq_top` (six lanes).

`tb/` holds one self-checking testbench per module. `tb_vq_pkg` generates the
test pictures from a hash of the pixel coordinates, so no picture is stored. It
packs them exactly as a host would, and computes the expected results
independently from pixel coordinates. `tb_vq_top` runs all six lanes with random
stalls and counts every mechanism. `tb_vq_full` runs a full 8K frame on all six
lanes at once with the default parameters, about 2.07 million clocks.
`tb_vq_workloads` runs QVGA, VGA, fullHD and 4K frames side by side on the
six lanes. Every
testbench prints `TB_RESULT checks=N failures=M`.

Example, with verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/vq_pkg.sv tb/tb_vq_pkg.sv rtl/vq_stream_fifo.sv rtl/vq_frame_ctrl.sv \
  rtl/vq_blockiness.sv rtl/vq_interlace.sv rtl/vq_exposure.sv rtl/vq_blackout.sv \
  rtl/vqfpga.sv rtl/vq_top.sv tb/tb_vq_top.sv --top-module tb_vq_top
./obj_dir/Vtb_vq_top
```

The full 8K test takes about 20 seconds to build and run.
