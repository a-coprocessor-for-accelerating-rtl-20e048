# AddressEngine: a pixel-addressing coprocessor in SystemVerilog

Image-analysis software such as video object segmentation spends most of its
time not on arithmetic but on working out which pixels to fetch: the current
pixel, its neighbours, the same pixel in another frame. The AddressEngine takes
that loop off the host. The host keeps the high-level algorithm; for each
library call it hands the coprocessor one or two images and one pixel
operation, and the coprocessor applies that operation to every pixel in scan
order. Two addressing schemes are supported:

* **intra** – the result at (x,y) depends on the pixel and its neighbours in
  the same image (filters, morphological operators, gradients);
* **inter** – the result at (x,y) depends on the pixel at (x,y) in two
  images (difference pictures, sum of absolute differences).

The hardware's central idea is reuse. Input lines are staged in an on-chip
line buffer that returns a whole vertical column of the neighbourhood in one
read. A matrix register (a 3x3 window, or a 9-pixel line) then moves one
column per pixel, so a pixel is fetched from board memory once, however many
neighbourhoods it belongs to. A
four-stage pipeline, driven by its own small controller, produces one result
pixel per clock.

This RTL is a reconstruction of the architecture described in W. Stechele,
L. Alvado Cárcel, S. Herrmann, J. Lidón Simón, "A Coprocessor for
Accelerating Visual Information Processing". That paper describes a
prototype on an FPGA board (Virtex-II, six 32-bit ZBT SRAM banks, PCI). The
paper gives the block structure, memory organisation and sizes. It does not
give signal-level detail, so the handshakes, encodings and FIFO rules here
are this design's own. Every such choice is named in the comment at the top
of the file concerned and in "Departures and gaps" below.

## Block structure

```
          PCI (outside)                     FPGA: address_engine
  PC  <------------------>  ZBT  ------------------------------------------------
   ^                        banks 0..3 --> txu_in --> iim --> process_unit --> oim
   |                        (block_A/B)                         ^   (4 stages)   |
   |                                                            |                v
   |                        banks 4,5  <-----------------------------------  txu_out
   |                        (Res_A/B)                           |
   |  irq                                                pixel_level_ctrl
   +--------------------------------- image_level_ctrl ----^ (enable, start)
```

| module | role |
|---|---|
| `address_engine` | top; brings out the six ZBT bank ports and the host interface |
| `image_level_ctrl` | call control: configuration, strip bookkeeping, line transfer orders, processor enable, result-bank switch, interrupts |
| `txu_in` | copies one image line per request from a ZBT input block into the IIM, one 64-bit pixel per clock |
| `iim` | input intermediate memory: 16 line memories x 2 banks, a FIFO of lines |
| `pixel_level_ctrl` | processor control path, made of `plc_control_fsm`, `plc_startpipeline`, `plc_instr_fsm`, `plc_arbiter` |
| `process_unit` | processor datapath: scanner, preload/matrix registers, `pixel_processor`, result register, storing unit |
| `pixel_processor` | the per-pixel operation (combinational) |
| `oim` | output intermediate memory, same structure as the IIM, used as a pixel FIFO |
| `txu_out` | writes result pixels from the OIM into the ZBT result banks |
| `ae_pkg` | pixel type, configuration struct, enums, memory map constants |

Everything runs in one clock domain; the prototype ran at 66 MHz, the PCI
clock.

## Pixels and the board memory

A pixel is 64 bits: 8-bit Y, U, V and 16-bit Alfa and Aux. Memory words are
32 bits, so a pixel is stored in two halves. The lower half holds
`{Y,U,V,pad}` (Y in bits 31:24) and the upper half holds `{Alfa,Aux}`. That
order within a word is this design's choice.

The six ZBT banks are used as follows:

| bank | content | accessed here |
|---|---|---|
| 0, 1 | block_A: lower / upper halves of even strips | read by `txu_in` |
| 2, 3 | block_B: lower / upper halves of odd strips | read by `txu_in` |
| 4 | Res_Block_A: results, lower then upper half of each pixel in consecutive words | written by `txu_out` |
| 5 | Res_Block_B: same layout, results after the bank switch | written by `txu_out` |

For input the two halves of a pixel are at the **same address** of the two
banks of a block, so one memory cycle brings a whole pixel. Pixel (x,y) of
image 0 is at word `y*width + x`. In inter mode, image 1 starts at word
`0x20000` (`IMG2_BASE`) of the same block. A CIF image (101,376 pixels) fits
below that offset.

For output the two halves go to the **same bank** one after the other (word
`2n` lower, `2n+1` upper). The host then reads the result in pixel order.
Writing a pixel takes two clocks, half the rate of the processor. This
mismatch is why the OIM exists.

### Strips and double buffering

The host does not send the image in one piece. It sends strips of 16 lines,
alternately into block_A and block_B. The engine can then work on one strip
while the next is arriving. Sixteen lines is the power of two above the
largest vertical reach of a supported neighbourhood, and it divides both
QCIF (144) and CIF (288) heights. In inter mode a strip holds the same 16
lines of both images.

The engine starts on strip 0 as soon as the host announces it. The block of
strip *s* becomes free once all of its lines have been copied into the IIM.
The engine then raises an interrupt, and the host may write strip *s+2*
there.

**Vertical scan.** With `cfg.scan = SCAN_V` the image is scanned column
by column, top to bottom, and a strip is 16 image *columns*. The input
transmission unit fetches a column by stepping the board address by
`width`. From the IIM on, everything works in scan coordinates: a "line" is
a scan line, i.e. an image column. The image layout in board memory stays
the same (`y*width + x`); the host writes only the strip's columns. The
scan-line count (the image width) must then be a multiple of 16.

Results go to Res_Block_A until the host has announced the last strip. At
that point the host no longer uses the PCI bus for input and can start
reading results. The engine switches to Res_Block_B once, at a pixel
boundary, and reports how many pixels Res_Block_A holds. The rest of the
image goes to Res_Block_B.

## The line buffers (IIM and OIM)

The **IIM** has 16 line memories. Each is split into a lower and an upper
32-bit bank, 32 memories in all. In intra mode, image line L lives in line
memory `L mod 16`. In inter mode the IIM becomes two FIFOs of 8 lines: image
0 uses memories 0–7 and image 1 uses memories 8–15. A read takes one column
address and returns the pixel at that column from **all 16** line memories
at once. A neighbourhood column therefore arrives in one clock, however tall
it is, up to the buffer height.

The IIM is managed as a FIFO of lines. The process unit reports two numbers:

* `need_line` – the highest line the next pixel-cycle reads (y+1 for CON_8,
  y+4 for the 9x1 line, y otherwise; clipped to the image);
* `low_line` – the lowest line still in use (y−1 or y−4 of the newest
  pixel-cycle).

`empty` is high while `need_line` has not arrived (in inter mode, in either
image). `full_0`/`full_1` are high while 16 (inter: 8) lines sit between
`low_line` and the newest line received. The image level controller starts
a line transfer only into a FIFO that is not full. It enables the processor
only while the IIM is not empty and the OIM is not full.

The **OIM** has the same 16 x 2-bank organisation. It is used as a plain
show-ahead pixel FIFO between stage 4 of the processor and `txu_out`. When
it is full, stage 4 waits, and the image level controller stops new
pixel-cycles.

## The processor: stages, instructions and arbitration

A *pixel-cycle* is everything needed to produce one result pixel. It passes
through four stages. Up to four pixel-cycles are in flight, one per stage,
always in order.

| stage | hardware (`process_unit`) | instruction | control signal |
|---|---|---|---|
| 1 | scanner, pixel position counters, address generator | SCAN: take position (x,y), advance the counters, read the first column into the preload register | `s1_issue` |
| 2 | preload register, pixel selection, matrix loading, matrix register | LOAD at a line start: columns x−1 … x+1 (CON_8) or x−4 … x+4 (1x9 line); SHIFT: one new column x+1 or x+4 | `s2_step`, `s2_rd_next` |
| 3 | pixel level processor, result register | EXEC: operation on the matrix into the result register | `s3_exec` |
| 4 | storing unit | STORE: result register into the OIM | `s4_store` |

Four neighbourhoods are built (`nbh_e`):

| `nbh` | window | reads per pixel | line cost |
|---|---|---|---|
| `CON_0` | the pixel alone | 1 | `width` |
| `CON_8` | 3x3 square | 1 (LOAD: 3) | `width + 2` |
| `LINE_H9` | 1x9 horizontal line | 1 (LOAD: 9) | `width + 8` |
| `LINE_V9` | 9x1 vertical line | 1 | `width` |

The table is for a horizontal scan. In a vertical scan the two line windows
swap roles: the horizontal line lies across the scan and costs one read, and
the vertical line is the one that is loaded and shifted.

Pixel selection picks, from the 16 pixels the IIM returns, the rows y−4 …
y+4 (intra; clipped at the top and bottom border) or row y of both images
(inter). Matrix loading then depends on the window. CON_8 shifts the 3x3
matrix one column left and puts rows y−1 … y+1 of the new column on the
right. A line along the scan shifts the 9-pixel line one place and puts in
the pixel of row y. A line across the scan takes all nine rows of the
column at once. This is the case
the 16-line IIM exists for: a neighbourhood across the scan direction still
costs one read. In CON_0 and inter mode the single pixel fills the window,
and only its centre is used. Columns outside the image are clipped, so
border pixels repeat.

Stages share three resources. The **arbiter** (`plc_arbiter`) grants them,
always favouring the older pixel-cycle:

1. **IIM read port and preload register.** Stage 1 fills the preload register
   when it issues. A LOAD in stage 2 needs two more reads (eight for the
   1x9 line). Stage 2 keeps the
   port until it takes its last column, and stage 1 waits.
2. **Matrix register.** Stage 2 may overwrite it only when stage 3 is empty or
   reads it in the same clock.
3. **Result register.** Stage 3 may overwrite it only when stage 4 is empty or
   stores it in the same clock (stage 4 waits while the OIM is full).

The other three parts of the controller:

* `plc_control_fsm` (IDLE → RUN → DRAIN) offers a new pixel-cycle while it
  is enabled and the scanner has pixels left. It decides LOAD (the column
  count `load_cols` the process unit reports: 3 or 9) or SHIFT (1 column),
  and pulses `done` when the pipe is empty.
* `plc_startpipeline` holds a valid bit per stage.
* `plc_instr_fsm` holds the column count of the stage 2 instruction. It turns
  grants into the five control signals.

Resulting timing, with nothing stalled:

* one pixel-cycle per clock while shifting;
* a CON_8 line costs `width + 2` clocks, because the LOAD takes three
  clocks; a 1x9 line costs `width + 8`;
* a CON_0, 9x1 or inter line costs `width` clocks;
* a result leaves stage 4 three clocks after its SCAN (five when it is a
  CON_8 LOAD, eleven for a 1x9 LOAD).

End to end, the output bank's two clocks per pixel set the pace. A CIF
intra CON_8 call takes about 213,000 clocks in simulation, including the
host's strip writes at one pixel per clock.

## Operations

`pixel_processor` works on each of the Y, U, V channels enabled in
`cfg.chan`. Channels not enabled, and Alfa and Aux, are copied from the
centre pixel of image A.

| `pix_op_e` | result per channel | use |
|---|---|---|
| `OP_COPY` | centre pixel | CON_0 copy |
| `OP_ADD` | min(A+B, 255) | inter |
| `OP_SUB` | \|A−B\| | inter, difference picture |
| `OP_MULT` | (A·B) >> 8 | inter |
| `OP_GRAD` | max − min over the window | intra, morphological gradient |
| `OP_DILATE` | max over the window | intra |
| `OP_ERODE` | min over the window | intra |
| `OP_SMOOTH` | 3x3: Σ w(r)·w(c)·p / 16, w = (1,2,1); line: (8·centre + the other eight) / 16 | intra, low-pass filter |

In inter mode the process unit also sums |A−B| of the Y channel over the
image. The result is the `sad` output, a sum of absolute differences.

The paper names add, sub, mult and gradient as sub-functions, and gradient,
histogram and filters as example operations. The table above is one
concrete operation set built from those. A histogram is not included.

## Driving a call

The configuration is an `ae_cfg_t`: `scan` (SCAN_H / SCAN_V), `mode`, `nbh` (CON_0, CON_8, LINE_H9,
LINE_V9; intra only, inter always uses the single pixel), `op`,
`chan`, `width` (at most `W_MAX` = 352), and `height` (a multiple of 16).

1. Pulse `host_start` with `host_cfg`. `busy` rises, and all interrupt bits
   are cleared.
2. Write strip 0 into banks 0/1 and pulse `strip_valid`. Write strip 1 into
   banks 2/3 and pulse `strip_valid`.
3. For each further strip *s*, wait for `irq_status[s % 2]` (BLK_A_FREE /
   BLK_B_FREE), clear it by writing a one to that bit of `irq_clear`, then
   write the strip and pulse `strip_valid`.
4. After the last strip, `irq_status[2]` (RES_A_RDY) rises. Bank 4 then holds
   `res_a_count` finished pixels, which may be read while processing goes on.
5. `irq_status[3]` (DONE) rises and `busy` falls. Bank 5 holds the remaining
   `res_total − res_a_count` pixels, and `sad` is valid.

`irq` is the OR of the four status bits.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `LINES` | 16 | line memories in the IIM and OIM (strip height) |
| `W_MAX` | 352 | longest line (CIF) |
| `RD_LAT` | 2 | ZBT read latency in clocks (at least 2) |

The image size is set per call in `ae_cfg_t`. The defaults hold QCIF and CIF
images. CIF uses 101,376 words per input bank and 202,752 words of a
262,144-word result bank.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_pixel_processor` | 8,000 random 3x3 and line neighbourhoods, all operations and channel masks, against an integer reference model (`tb_ref_pkg`) |
| `tb_iim` | column reads of every line memory, FIFO wrap-around, FULL/EMPTY in intra and inter mode |
| `tb_oim` | order and content against a queue under random push/pop, exact FULL/EMPTY |
| `tb_txu_in` | every IIM write (line, image, column, value) from both blocks and both images, for image lines and image columns, length + 2 clocks per scan line |
| `tb_txu_out` | word layout in both result banks, two clocks per pixel, single bank switch, counts |
| `tb_image_level_ctrl` | line request order and block, strip gating, FIFO-full gating, block-free interrupts after the right strip, bank switch, DONE, clearing |
| `tb_pixel_level_ctrl` | instruction counts, LOAD/SHIFT, one pixel per clock, `width + 2` clocks per CON_8 line and `width + 8` per 1x9 line, no issue while disabled, no store while the OIM is full |
| `tb_process_unit` | datapath with controller and IIM: every result pixel of intra CON_8 (four operations), both line windows (two operations each), CON_0, vertical scans and inter (three operations, SAD) against the reference, with random OIM back-pressure |
| `tb_address_engine` | whole design at default parameters: CIF 352x288 intra CON_8 gradient, QCIF inter difference with SAD, 32x32 CON_0 copy, 64x48 smoothing along a 1x9 line and gradient across a 9x1 line, and three vertically scanned calls (CON_8 smoothing, horizontal-line erosion, inter difference). It uses a PC model and six ZBT models (`zbt_bank_model`, behavioural) and checks every result pixel read back from both result banks. It also counts IIM-empty stalls, OIM-full stalls, LOADs, SHIFTs, arbiter hold-offs, IIM-full transfer hold-offs, block-free interrupts, bank switches and both line windows, each of which must occur. |

To run one, for example the full-design test:

```
verilator --binary --timing --assert --top-module tb_address_engine \
  -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/ae_pkg.sv tb/tb_ref_pkg.sv tb/tb_address_engine.sv -o sim
./obj_dir/sim
```

The testbenches assume two-state simulation. All state the design reads is
reset by `rst_n` or by the per-call `start`. The line and FIFO memories are
written before they are read.

## Departures and gaps

* **Scan direction.** Both directions are built. Results always leave in
  scan order, so a vertical call stores its result image column by column.
  The paper does not say how results of a vertical scan are laid out.
* **Neighbourhoods.** CON_0, the 3x3 CON_8 and 9-pixel lines along and
  across the scan are built. The paper's figure of neighbourhood types shows
  the line shapes without sizes or operations. The length of nine follows
  the paper's statement that one pixel needs at most nine lines of input;
  the operations on the lines are this design's. Inter mode uses the single pixel at
  the same position in both images.
* **Operations.** The operation set is this design's choice (see above).
  There is no histogram. The inter operations that need both complete images
  before processing starts, mentioned in the paper's timing discussion, are
  not built.
* **Memory count.** The text gives 32 block memories for the IIM, and the OIM
  has the same structure. The paper's FPGA utilisation table lists 29 block
  RAMs for the whole design. This RTL follows the text. It declares two 16 x
  352 x 32-bit arrays per intermediate memory, and it does not try to match
  the table.
* **Host side.** The PCI interface, DMA and the PC's register map are outside
  the design. The top exposes plain signals instead (`host_start`,
  `host_cfg`, `strip_valid`, `irq*`, counters). The ZBT banks are external.
  Their model in `tb/` adds a second port for the PC's access.
* **Own choices, not from the paper:**
  * channel order within a word;
  * the image-1 offset `0x20000`;
  * ZBT read latency;
  * the FULL/EMPTY rules;
  * the interrupt bits and their clearing;
  * the strip handshake;
  * replicate-border handling;
  * the moment of the result-bank switch (the first pixel boundary after the
    last strip is announced);
  * the SAD accumulator.
* **Assertions.** Handshake rules are written as concurrent assertions. These
  cover writes into a line memory still in use, push into a full OIM or pop
  from an empty one, stage order in the start-pipeline, and a single IIM
  reader per clock. Simulate with `--assert` to enable them.
