# Single-storage SGM stereo depth pipeline in SystemVerilog

This RTL turns a pair of 640x480 8-bit camera frames into a dense disparity
(inverse depth) image in real time on a small FPGA. It has three steps:

1. Rectification. Each raw image is resampled through a precomputed map, so
   that matching pixels lie on the same row in both images.
2. Matching cost. Every left pixel is compared with 92 candidate right
   pixels on the same row, using 7x7 census signatures and Hamming distance.
3. Aggregation. The costs are smoothed with a semi-global matching (SGM)
   style recursion, and the cheapest disparity is kept.

The aggregation is what makes SGM expensive in hardware. Textbook SGM keeps
one cost vector per path direction, and the storage grows with the number of
paths. This design uses a variant of SGM called more-global matching (MGM):
the recursion of one pixel looks at all four of its already-visited
neighbours at once (top-left, top, top-right, left). With all four paths in
one group, a pixel needs only **one** stored cost vector, and so only one
buffer is needed. The buffer holds one image row of cost vectors (`cost_row`,
640 x 92 bytes) plus the vector of the pixel just to the left (`cost_left`).
The whole aggregation then streams in a single raster scan, with about
57.5 KB of on-chip storage per matching block.

Five matching blocks run side by side on horizontal bands of the frame to
reach the frame rate. Everything moves through frame memory over AXI4.

```
            raw L ----+                 +----> rectified L --+
   map L (x,y 11.5) --+--> remap (L) ---+                    |
                                                             +--> SGM peripheral --> disparity
            raw R ----+                 +----> rectified R --+    (5 x sgm_core,
   map R (x,y 11.5) --+--> remap (R) ---+                          one band each)
                                                   all arrows are frame-memory
                                                   regions reached over AXI4
```

When a camera already delivers rectified frames, the remap units are not
started, and the SGM inputs are pointed at the received frames instead.


## Matching cost: census signatures and Hamming distance

For each pixel, the census transform compares the 48 other pixels of its 7x7
window with the centre pixel. Bit = 1 means the neighbour is darker than the
centre. The bits are taken in raster order, top row first, and the centre is
skipped. The cost of disparity `d` at left pixel `(y, x)` is the Hamming
distance between that pixel's left signature and the right signature at
`(y, x-d)`. The cost lies in 0..48.

How the hardware produces the signatures:

* `line_buffer` keeps the previous six rows of an image, one packed 48-bit
  word per column.
* Each new pixel comes out with the six pixels above it as a 7-pixel column.
  This takes one read and one write of the same address, which fits a simple
  dual-port block RAM.
* `census_window` shifts these columns into a 7x7 register window and
  computes the signature of the centre pixel combinationally.
* The centre is three rows and three columns behind the newest pixel. So
  after each image row, three "flush" steps push out-of-image columns into
  the window.

Image edges are handled this way:

* A column outside the image is marked invalid inside the window. Its bits are
  0 in both images, so it adds nothing to a Hamming distance.
* When `x-d < 0`, the right pixel does not exist. Its cost is set to the
  largest possible value, 48.
* Disparities are computed only for rows 3..476, where the full window fits
  vertically. Rows 0..2 and 477..479 of the output are not written.


## Aggregation with a single stored vector

This is the core of the design. `L(p, d)` is the aggregated cost of pixel `p`
at disparity `d`. The four neighbours `q` of `p` visited earlier in the scan
(TL, T, TR, L) each hold a stored vector `L(q, .)` and its minimum `m(q)`:

```
term_q(d) = min( L(q,d), L(q,d-1) + P1, L(q,d+1) + P1, m(q) + P2 ) - m(q)

L(p,d)    = min( 255,  C(p,d) + ( term_TL + term_T + term_TR + term_L ) >> 2 )
```

What this equation does:

* `d-1` and `d+1` are left out at the ends of the search range.
* Subtracting `m(q)` keeps the values small. Each term then lies in 0..P2.
* Dividing the sum by four (a right shift) averages the four paths.
* Capping at 255 keeps every cost in one byte.
* The output disparity is the `d` with the smallest `L(p, d)`. On a tie, the
  first (smallest) `d` wins.

`mgm_cost` is this equation for one `d`. It is purely combinational: four
three-way minima, one add per neighbour, a 4-input adder, a shift and a
saturating add.

### Where the four neighbour vectors come from

The RAM `cost_row_mem` holds a cost vector and its minimum for every column.
Columns at or right of the current pixel still hold the row above. Columns to
the left already hold the current row.

Inside `sgm_core`, the three vectors above the pixel are copied into
registers (`TL`, `T`, `TR`) so that all three can be read at `d-1`, `d` and
`d+1` in the same cycle. The left neighbour lives in the `cost_left`
register. The disparity loop runs once per pixel, one `d` per clock, and in
that same loop three things happen:

1. `L(p, d)` is computed from `TL/T/TR/L` and the matching cost.
2. The old `cost_left`, the vector of column `x-1` in the current row, is
   written into `cost_row[x-1]`. The top-left vector held there is no longer
   needed: it was copied into `TL` beforehand.
3. The vector of column `x+2` in the row above is prefetched from `cost_row`.

After the loop the window slides along: `TL <- T`, `T <- TR`,
`TR <- prefetch`, `L <- new vector`. The write at `x-1` and the read at
`x+2` never touch the same address, so one read port and one write port are
enough.

At the end of a row, `cost_left` is written back to the last column. At every
start, `cost_row` is filled with 255. Out-of-image neighbours (left of
column 0, right of the last column, above the first row) are read as all-255
vectors with minimum 255. For such a neighbour every candidate equals its
minimum, so its term is 0.

### Scan order and timing of one block

`sgm_core` reads one left pixel and one right pixel per raster step, through
its memory port. It feeds them into the two line buffers and census windows,
then runs the 92-cycle disparity loop for the pixel at the window centre.
Only the loop over disparities is pipelined; consecutive pixels do not
overlap. With a memory that accepts at once and answers one cycle later:

| step                                     | cycles          |
|------------------------------------------|-----------------|
| centre pixel, normal                     | DRANGE + 12 = 104 |
| centre pixel, last 3 of a row (no reads) | DRANGE + 7 = 99 |
| step that produces no centre pixel       | 10              |

Through the AXI4 adapter, every pixel's disparity write costs one more cycle,
because the adapter waits for the write response. The run time of a block is
therefore close to rows x columns x (search range + pipeline depth).


## Five blocks on one frame

A block's storage grows only with the row width, but its run time grows with
the whole frame.
`sgm_multi` therefore cuts the frame into `NBLOCKS` = 5 bands of 96 output
rows each and runs one `sgm_core` per band, each on its own memory port.

* A band's census windows reach 3 rows above and below it. So block `b` reads
  rows `[96b - 3, 96b + 99)`, clipped to the frame, and writes only its own
  96 rows.
* With this overlap, no unmatched strip appears at the band boundaries.
* Each block starts its aggregation afresh at the top of its band. Paths
  therefore do not cross band boundaries. This is inherent to splitting the
  frame.
* `done` is raised when the last block finishes.


## Rectification (remap)

Each camera has a map with one 32-bit word per rectified pixel:

* bits [15:0]: the source x in the raw image;
* bits [31:16]: the source y;
* both unsigned, with 5 fractional bits (1/32 pixel).

`remap` walks the map in raster order. This is a stream of reads. For each
map entry it then fetches the four raw pixels around the source position.
These reads are random access. It blends the four pixels in fixed point:

```
A = raw(x0, y0)    B = raw(x0+1, y0)    C = raw(x0, y0+1)    D = raw(x0+1, y0+1)
top    = A*(32-fx) + B*fx
bottom = C*(32-fx) + D*fx
pixel  = (top*(32-fy) + bottom*fy + 512) >> 10
```

Here `x0 = x >> 5` and `fx = x & 31`, and likewise for y. Positions at or
beyond the last column or row are clamped to it.

Each rectified pixel takes five reads and one write. One request is
outstanding at a time. A pixel takes 17 cycles on an ideal plain port and
18 through the AXI4 adapter. The two remap units run in parallel, one per
camera.


## Memory access: peripheral port and AXI4 adapter

Inside the design, every unit (the two remaps and the five SGM blocks) talks
to memory through a small port defined in `sgm_pkg`:

* A request carries `valid`, `we`, a byte address, 32-bit write data and byte
  strobes.
* The request is held unchanged until `ready`. An assertion checks this.
* A read returns its word with `rvalid`, at the earliest one cycle after
  acceptance.
* Only one request is outstanding at a time.

At the top, each such port goes through `axi4_master`, which makes it an
AXI4 master:

* Every transfer is a single 32-bit beat: LEN 0, SIZE 4 bytes, INCR burst,
  WLAST 1, with the unit's byte strobes.
* AR, AW and W are driven straight from the held request.
* A read is accepted at the AR handshake, and its data is passed on at the R
  beat.
* A write is accepted back to the unit only at the B response. So when a unit
  reports `done`, all of its writes are in memory, and the next stage can
  safely start.
* IDs, cache, protection, QoS and user signals are left out. Error responses
  are ignored.

`stereo_top` exposes `NBLOCKS + 2` AXI4 master ports:

| index | master     |
|-------|------------|
| 0     | left remap |
| 1     | right remap |
| 2..6  | SGM bands 0..4 |

The interconnect and DRAM controller are outside the design.


## Control (`stereo_top`)

| signal | meaning |
|---|---|
| `remap_start` | starts both remap units on the base addresses `raw_*_base`, `map_*_base`, `rect_*_base` |
| `remap_done` | pulses when both remap units have finished |
| `sgm_start` | starts the five SGM blocks on `sgm_left_base`, `sgm_right_base` and `disp_base` |
| `sgm_done` | pulses when the disparity image is complete |
| `*_busy` | high while the corresponding units are working |

A host processor is expected to sequence one frame:

1. capture the raw frames;
2. start remap and wait;
3. start SGM on the rectified frames and wait;
4. display or use the disparity image.

The processor may also overlap remap of the next frame with SGM of the
current one, using separate buffers.

Disparity bytes are written at `disp_base + y*640 + x`. The rectified images
use the same layout.


## Parameters

| parameter | default | meaning |
|---|---|---|
| `IMG_W`, `IMG_H` | 640, 480 | frame size |
| `WIN` | 7 | census window (48-bit signatures) |
| `DRANGE` | 92 | disparities searched, 0..91 |
| `NBLOCKS` | 5 | parallel SGM blocks / bands |
| `P1`, `P2` | 10, 40 | smoothness penalties for a disparity step of 1 and for a larger step |
| `FRAC` (remap) | 5 | fractional bits of the map coordinates |
| `COST_W` | 8 | bits per stored aggregated cost |

Storage per SGM block:

| memory | size | bits |
|---|---|---|
| `cost_row` | 640 x 92 x 8 bit | 471,040 |
| column minima | 640 x 8 bit | 5,120 |
| line buffers | 2 x 640 x 48 bit | 61,440 |

Synthesised, one SGM block has about 10k flip-flops (mostly the register
window of four 92-byte vectors) and 0.54 Mbit of RAM. The whole top has
about 52k flip-flops and 2.7 Mbit of RAM.

On a Zynq-7020, as found on the Zedboard, the RAMs map to about 20 of the
36 Kbit block RAMs per SGM block:

* `cost_row`: 15, in the 4K x 9 shape;
* the two line buffers: 4, in the 1K x 36 shape;
* the minima: 1.

So the five blocks need about 100 block RAMs, of the 140 on the chip. The
flip-flop count is well under the chip's 106,400. The LUT count has not been
mapped to that device.


## Performance

These are measured in the full-size simulation: 640x480, 92 disparities,
5 blocks, through the AXI4 ports, with a memory that never drops READY and
answers one cycle after the handshake.

| pass | cycles | at 100 MHz |
|---|---|---|
| both remaps, in parallel | 5,529,601 | 55.3 ms |
| SGM, 5 blocks | 6,576,709 | 65.8 ms (15.2 fps) |

Running the remaps and SGM back to back gives about 8.3 fps. Overlapping the
remap of one frame with the SGM of the previous frame gives about 15 fps.
Feeding already-rectified frames also gives about 15 fps. A real DRAM, with
a read latency of several cycles, adds roughly two latencies per pixel to
the SGM time: there is one left read and one right read per pixel, and they
are not overlapped.


## Where this RTL departs from the design it implements, and what it assumes

* **P1 and P2** are not specified in the source design. 10 and 40 are used.
  Accuracy depends on them.
* **The division by four.** The source text and its figure write the
  division by four as a left shift by two. A division needs a right shift,
  and that is what is built.
* **Band size.** The source describes the five parallel sections as
  "128 rows", which does not match 480/5. Here the bands are 96 output rows
  each, plus the 3-row overlap on each side.
* **Memory interface.** The source uses AXI4 masters generated by a
  high-level-synthesis flow. Here they are a hand-written single-beat adapter
  with one transfer outstanding, with no bursts.
* **Edges.**
  * The cost for `x-d < 0` is 48.
  * Out-of-image census neighbours give 0 bits.
  * The top and bottom 3 output rows are not written.
  * The source does not describe any of these choices.
* **Census bit sense** (neighbour darker than centre, 1) and **tie rule**
  (first minimum) are this design's choices.
* **Remap details.** The source fixes the 5 fractional bits and the
  4-neighbour bilinear blend. The map word layout, the clamping and the
  rounding are choices made here. In one labelling of the source's
  interpolation figure, B has the same coordinates as D. B is built as the
  right neighbour of A, which is what a bilinear blend needs.
* **Not included:**
  * the host processor and its software;
  * the cameras;
  * the DRAM and its controller;
  * the AXI interconnect;
  * the VGA display peripheral, which is only named in the source and would
    read the disparity image from memory;
  * the 3D mapping software.


## Files

`rtl/`:

| file | role |
|---|---|
| `sgm_pkg.sv` | shared constants, the peripheral memory port structs, the AXI4 channel structs, request helpers |
| `hamming_distance.sv` | popcount of the XOR of two census signatures |
| `line_buffer.sv` | previous `WIN-1` rows of one image, one word per column |
| `census_window.sv` | 7x7 window and census signature of its centre |
| `mgm_cost.sv` | the aggregation equation for one disparity |
| `cost_row_mem.sv` | `cost_row` RAM and column-minimum RAM |
| `sgm_core.sv` | one SGM block: scan, census, disparity loop, register window, write-out |
| `sgm_multi.sv` | `NBLOCKS` SGM blocks on bands of the frame |
| `remap.sv` | rectification by bilinear interpolation through a map |
| `axi4_master.sv` | peripheral port to single-beat AXI4 master |
| `stereo_top.sv` | two remaps, the SGM peripheral, one AXI4 master per unit |

`tb/`:

| file | role |
|---|---|
| `sgm_ref_pkg.sv` | software reference: census, Hamming, the aggregation of a band, bilinear remap |
| `mem_model.sv` | frame memory on the plain peripheral port, with optional random stalls and latencies |
| `axi_mem_model.sv` | frame memory with AXI4 slave ports: random READY drops and response delays; counts protocol errors; stores a write at its B response |
| `tb_<block>.sv` | one self-checking testbench per block |
| `tb_stereo_top.sv` | reduced-size end-to-end test |
| `tb_stereo_full.sv` | full-size end-to-end test |
| `stereo_e2e_body.svh` | body shared by the two end-to-end tests |


## Verification

Every testbench is self-checking. It compares the outputs with values computed
independently in the testbench, and it ends by printing
`TB_RESULT checks=<n> failures=<n>`. Each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_hamming_distance` | random and corner signatures against a bit count |
| `tb_mgm_cost` | random vectors against the equation; a second copy with a large P2 exercises the 255 cap |
| `tb_line_buffer` | every 7-pixel column of a random image streamed in raster order |
| `tb_census_window` | signatures of random windows, some columns outside the image, against a directly computed census |
| `tb_cost_row_mem` | read-while-write at different columns, one-cycle read latency |
| `tb_remap` | every rectified pixel of random maps (fractional, clamped) against the reference formula, with an ideal and a stalling memory; 17 cycles per pixel |
| `tb_sgm_core` | every disparity of a band against the software reference, ideal and stalling memory, an inner band; per-pixel cycle counts |
| `tb_sgm_multi` | a whole frame from three blocks: every disparity, no gap between bands, edge rows left unwritten, all blocks busy at once |
| `tb_axi4_master` | random reads and byte/word writes through a fast and a stalling AXI4 memory (see below) |
| `tb_stereo_top` | 32x20 frames, 12 disparities, 2 blocks, randomly stalling AXI4 memory (see below) |
| `tb_stereo_full` | the same flow at every default parameter: 640x480, 92 disparities, 5 blocks; the SGM pass must fit 10.5 frames/s at 100 MHz (at most 9,523,809 cycles) |

`tb_axi4_master` checks:

* the data of every read;
* that every write is in memory when it is acknowledged;
* the single-beat fields;
* that no protocol errors occur;
* one cycle for a read and two for a write with the fast memory.

`tb_stereo_top` runs two frames:

* Frame 1 is rectified and then matched.
* Frame 2 bypasses rectification.

It checks every rectified pixel and every disparity against the reference,
and the exact number of write transfers. It also counts that each mechanism
really happened, and fails if one did not:

* AXI4 stalls;
* fractional and clamped map entries;
* all SGM blocks busy at once;
* the remap pass;
* the bypass.

`tb_stereo_full` checks 1,221,124 values with 0 failures, and runs in
about 45 s of wall-clock time with Verilator.

To run a testbench with Verilator 5.x (other modules are found through
`-I`; the run ends by printing `TB_RESULT`):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/sgm_pkg.sv tb/sgm_ref_pkg.sv tb/tb_stereo_top.sv --top-module tb_stereo_top
./obj_dir/Vtb_stereo_top
```

Testbenches that do not use the reference package (for example
`tb_mgm_cost`) need only `rtl/sgm_pkg.sv` before the testbench file. To try
another size, change the `localparam`s at the top of `tb_stereo_top.sv`. The
reference model follows the parameters.
