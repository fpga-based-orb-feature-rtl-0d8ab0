# ORB feature extraction in one pass over the frame

ORB ("Oriented FAST and Rotated BRIEF") is the front end of many visual SLAM
systems. For each frame it finds FAST corners on an image pyramid, gives each
corner an orientation from the intensity centroid of its patch, and describes it
with a 256-bit binary BRIEF descriptor whose sampling pattern is rotated by that
orientation. In software the descriptor step forces a second pass over every
level. Its input is a Gaussian-smoothed image, and it can only start once a
corner's orientation is known.

This RTL does detection and description in one streaming pass per pyramid
level. Each level sits in an on-chip frame memory (RAM1) and is read by two
independent raster scans:

* The **detection scan** runs ahead. It finds corners, computes their
  orientation (sin and cos), and queues coordinates in RAM3 and sin/cos in
  RAM2.
* The **description scan** trails it through two chained line-buffer stages.
  The first smooths the image with a 7x7 Gaussian. The second holds the
  31x31 smoothed patch. Whenever the centre of that patch reaches the oldest
  queued corner, both stages freeze. The descriptor is computed from the
  frozen window in 32 cycles, and the stream then resumes.

So no pixel is read from RAM1 more than twice, and no smoothed image is ever
stored. The structure follows a published FPGA design for real-time visual
SLAM (a 640x480, two-level pyramid at 67 frames/s and 203 MHz). Its block
names are kept here: RAM1/RAM2/RAM3, LB/RB for line buffer/register bank, the
synchronized two-stage line buffers, and scale recover. The arithmetic details
the published description leaves open were chosen for this RTL. They are
listed in the section on departures below.

## Data flow

```
pix stream -> Input Buffer -> Image resizing --+--> RAM1 level 1 (W x H)
                                               +--> RAM1 level 2 (5W/6 x 5H/6)

RAM1 (port A) -> LB1/RB1 31x31 -> FAST-9 + moments m10,m01 -> Orientation -> RAM2 (sin,cos)
                                        |                                   
                                        +-> (x,y) of each corner ---------> RAM3
RAM1 (port B) -> LB2/RB2 7x7 -> Gaussian -> LB3/RB3 31x31 -> Descriptor -> Scale recover
                       ^ shift enable from the controller (compares window centre with RAM3 head)
                                                                            -> Output Buffer -> feat stream
```

| RTL module | block | what it holds |
|---|---|---|
| `orb_extractor` | top | wiring, the detection pipeline registers, the record assembly |
| `sync_fifo` | Input Buffer, Output Buffer, RAM2, RAM3 | show-ahead FIFO with count and handshake assertions |
| `image_resize` | image resizing | writes level 1 and the bilinear 1/1.2 level 2 as pixels arrive |
| `frame_ram` | RAM1 (one bank per level) | one write port, two synchronous read ports |
| `line_window` | LB/RB | K circular line buffers plus a KxK register window |
| `feature_detect` | feature detection | FAST-9 test and disc moments (combinational) |
| `orientation` | orientation computing | word-length reduction and the sin/cos pipeline |
| `gauss7` | Gaussian filter | separable 7x7 smoothing (combinational) |
| `descriptor` | descriptor computing | steered BRIEF, 8 pairs per cycle |
| `two_stage_buffer` | synchronized two-stage line buffers and controller | LB2/RB2, Gaussian, LB3/RB3, the freeze logic, the descriptor |
| `scale_recover` | scale recover | maps level-2 coordinates back to the input image |
| `orb_ctrl` | control unit | level sequencer and detection read pointer |
| `orb_pkg` | | sizes, types, the BRIEF pattern generator, the FAST circle |

## The synchronized two-stage buffers

This is the part that needs the most care. The description scan must never
move its window centre past a corner that detection has not yet queued,
because that corner would be lost. It must also never wait for detection to
queue a corner that lies beyond its own window.

**Geometry.** Both scans read RAM1 in raster order, one pixel per cycle.
`line_window` with K lines presents, after reading raw index `q`, a window
centred `K/2` columns and `K/2+1` rows behind. The two scans therefore lag as
follows:

* **Detection:** the centre trails the detection read index by
  `16*W + 15` pixels.
* **Description:** the 7x7 Gaussian makes smoothed pixel (c,r) once raw
  (c+3,r+4) has been read. The 31x31 stage-2 window adds its own lag on top,
  so its centre trails the description read index by `20*W + 18` pixels.

**Read rule.** A corner at raster position `p` is therefore known at detection
index `p + 16W + 15`. Its patch is centred in stage 2 at description index
`p + 20W + 18`. For stage 2 to stop on time, the description index `q` must
obey `q < det_ptr + 4W + 3`. The register stages after each RAM read are
arranged so that the corner is in RAM3 before the stage-2 compare can see
it. The description index also stays below the number of pixels already
written to RAM1. The rule is lifted once detection of the level is finished.

**No deadlock.** Detection pauses while RAM3 has fewer than eight free
places, for the corners still inside its pipeline. When it pauses, the oldest
corner in RAM3 is always within reach of stage 2 under the rule above. So the
description scan can advance, consume that corner and free a place.

A concurrent assertion in `two_stage_buffer` checks the invariant directly:
the RAM3 head is never behind the stage-2 centre.

**Freezing.** After each stage-2 shift, the controller compares the window
centre (x2,y2) with the RAM3 head (x,y). On a match, the `adv` signal drops.
All registers of both stages, the RAM read and the pipeline between them hold
still. The descriptor then starts once all three of these are true:

* the corner's sin/cos is at the head of RAM2, which can lag because the
  orientation pipeline takes 4 cycles;
* the output buffer is not full;
* the descriptor is idle.

When it finishes, the record is emitted, RAM2 and RAM3 are popped together
and the stream moves on. Several corners in a row cost 33 cycles each.

**Borders.** Corners are accepted only 20 or more pixels from each border
(`EDGE`). This keeps every 7x7 and 31x31 window used inside one line of the
level. So no image border has to be made.

## Orientation with a short word length

The intensity centroid uses the moments m10 = Σ x·I and m01 = Σ y·I over the
disc x²+y² ≤ 225 of the 31x31 patch. These are signed values of 21 bits.
`orientation` needs only the direction, so it first shortens both moments
together:

1. Take the magnitudes.
2. Remove the leading zeros that the two magnitudes share.
3. Keep the top N bits (N = 8 by default), padding with zeros at the bottom
   if fewer remain.
4. Put the sign back, giving N+1 bits.

The ratio m/|m| is unchanged up to truncation, while the multipliers shrink
from 21x21 to 8x8.

The pipeline has four stages: reduce, then square and add, then an integer
square root of (sum << 16), then a rounded divide. It produces
sin = m01/r and cos = m10/r in signed Q2.8 (10 bits). A zero patch gives
sin 0 and cos 1.0. The latency is 4 cycles and one result is accepted per
cycle. `N` is a parameter, so the accuracy/area trade-off can be swept.

## Datapath units

* **FAST-9** (`feature_detect`): a pixel is a corner when 9 contiguous pixels
  of the 16-pixel radius-3 circle are all brighter than centre+20 or all
  darker than centre−20. There is no non-maximum suppression. The moments
  are formed combinationally from row and column sums of the disc.
* **Image resizing** (`image_resize`):
  * Level-2 pixel (u,v) samples the source at (6u/5, 6v/5).
  * The fractions are multiples of 1/5.
  * Bilinear weights with rounding give (Σ w·p + 12)/25.
  * Level 2 is floor(5W/6) by floor(5H/6), so 533x400 for 640x480.
  * It needs one previous line and is produced on the fly while level 1 is
    written.
* **Gaussian** (`gauss7`): separable taps [5 8 12 14 12 8 5]/64 in each
  direction, rounded.
* **Steered BRIEF** (`descriptor`):
  * Each pair (a,b) of the pattern is rotated with x' = x·cos + y·sin and
    y' = y·cos − x·sin.
  * The result is rounded to the nearest pixel and clamped to ±15.
  * Bit i is `win[a'] >= win[b']`.
  * Eight pairs are evaluated per cycle (`PPC`), so 256 bits take 32 cycles.
* **The BRIEF pattern** (`orb_pkg::gen_pattern`) is computed at elaboration:
  * A xorshift32 generator with seed 0x2545F491 draws the values.
  * Each coordinate is the sum of four integers uniform in [−5,5], which is
    roughly Gaussian with σ ≈ 6.3.
  * Pairs whose points leave the radius-13 disc are redrawn, so a rotated
    point never leaves the window.
* **Scale recover**: level-2 coordinates map back as (6x+2)/5, which is
  x·1.2 rounded. Both are reported in each record.

## Interface and timing of the top

`orb_extractor #(W=640, H=480, FDEPTH=1024, IBUF_DEPTH=64, OBUF_DEPTH=16, PPC=8)`

| port | dir | meaning |
|---|---|---|
| `start` | in | one-cycle pulse while `busy` is low; begins a frame |
| `pix_valid`, `pix_ready`, `pix[7:0]` | in/out/in | raster-order gray pixels, W·H of them |
| `feat_valid`, `feat_ready`, `feat` | out/in/out | one `feat_t` record per corner |
| `busy`, `frame_done` | out | frame in progress; one-cycle pulse at the end |

`feat_t` packs these fields:

* `level`: 0 for full size, 1 for the reduced level;
* `x`, `y`: coordinates in the level;
* `x_full`, `y_full`: coordinates scaled back to the input image;
* `desc[255:0]`: the descriptor.

Records come level by level, in raster order within each level.

Level 1 is processed while the frame is still arriving. Level 2 follows from
RAM1. One frame takes about W·H + (5W/6)(5H/6) cycles plus 33 cycles per
corner, and longer if the consumer applies back-pressure. At 640x480 a test
frame with 832 corners took 548,704 cycles. That is 2.7 ms at 203 MHz,
against the 14.8 ms per frame reported for the original system.

Memory at the defaults:

* RAM1: 307,200 + 213,200 bytes;
* line buffers: (31 + 7 + 31) lines of 640 pixels;
* RAM2/RAM3: 1024 entries each.

## Departures from the published design

* **Bus side.** The published system sits on an ARM SoC with DMA, an AXI bus,
  shared memory and an instruction memory that drives the control unit. None
  of that is built here. The pixel and record streams are plain valid/ready
  ports, and the control unit is a fixed sequencer: level 1, then level 2.
* **Not specified there, chosen here:**
  * the FAST variant and threshold (FAST-9, 20);
  * the absence of non-maximum suppression and of a Harris score;
  * the Gaussian weights;
  * the BRIEF pattern, which was generated as above and does not reproduce
    the ORB-SLAM table;
  * the sin/cos format (Q2.8);
  * the rounding in resize, rotation and scale recovery;
  * FIFO depths, and the depth of RAM2/RAM3 (1024);
  * all handshakes.
* **Border handling.** The original extends the image border. Here, corners
  closer than 20 pixels to a border are ignored instead.
* **Moment range.** The original quotes a moment range of ±624,750 in 21
  bits. The disc used here reaches ±577,320, which also fits 21 bits.
* **Pyramid depth.** Only the two-level pyramid of the main configuration is
  built. The resize ratio is fixed at 1.2.

## Verification

Every module has a self-checking testbench in `tb/`. `tb/orb_ref_pkg.sv` is a
bit-exact behavioural model of the whole algorithm: resize, FAST, moments,
orientation with an exact integer square root, Gaussian, BRIEF, and the record
list of a frame. The testbenches compare against it or against their own
arithmetic.

| testbench | what it checks |
|---|---|
| `tb_sync_fifo` | random push/pop against a queue, flags and count |
| `tb_frame_ram` | random writes and both read ports against an array |
| `tb_line_window` | every window position of random images, K=7 and K=31 |
| `tb_image_resize` | both levels of a random image, with input stalls |
| `tb_gauss7` | random windows against the formula |
| `tb_feature_detect` | corner flag and moments on random and planted corners |
| `tb_orientation` | sin/cos for random and extreme moments, latency 4 |
| `tb_descriptor` | descriptors of random windows and angles, 32-cycle latency |
| `tb_scale_recover` | all coordinates of both levels |
| `tb_two_stage_buffer` | records from a model RAM1/RAM2/RAM3 with late sin/cos, full output and slow detection |
| `tb_orb_ctrl` | level sequence, read pointer gating on written pixels and RAM3 room |
| `tb_orb_extractor` | whole frame at 96x80 with tiny FIFOs and random back-pressure; every record against the model; counts each stall mechanism |
| `tb_wordlen_sweep` | orientation error at (15,15) for N = 3..10: max 5.15, 2.52, 1.25, 0.62, 0.33, 0.18, 0.11, 0.08 pixels |
| `tb_orb_full` | one 640x480 frame at default parameters: all 832 records and the frame time |

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and has a cycle
watchdog. `tb_orb_extractor` requires each mechanism to occur at least once.
These mechanisms are the description freeze, waiting for sin/cos, waiting for
RAM3 room, the lead rule holding stage 2 back, the output buffer filling, and
both levels.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/orb_pkg.sv tb/orb_ref_pkg.sv \
  $(ls rtl/*.sv | grep -v orb_pkg) tb/tb_orb_extractor.sv \
  --top-module tb_orb_extractor
./obj_dir/Vtb_orb_extractor
```

Replace the last file and top module for any other testbench. `tb_orb_full`
takes a few minutes. Verilator has only two states, so every register that is
read is reset.

## Changing it

* **Image size:** `W` and `H` on the top. The level-2 size follows. Line
  buffers are sized from `W`, and `CW` in `orb_pkg` (10 bits) limits
  coordinates to 1023.
* **Descriptor throughput:** `PPC` pairs per cycle; 256 must be divisible by
  it.
* **Corner backlog:** `FDEPTH` for RAM2/RAM3. A deeper queue lets detection
  run further ahead of a stalled consumer.
* **Orientation precision:** the `N` parameter of `orientation`.
* **Algorithm constants:** `FAST_T`, `FAST_N`, `EDGE` and the pattern seed
  are in `orb_pkg`. The reference model in `tb/orb_ref_pkg.sv` writes its
  own constants, so that it stays independent of the RTL. Change both
  together.
