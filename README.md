# Line-based image labeling core for a processor + FPGA robot component

Connected-component labeling gives every group of touching white pixels in a binary
image a number of its own. A robot uses these numbers to measure the area, position or
orientation of objects. In software the first labeling pass is a tight raster loop, and
on a small embedded ARM core it takes close to a second per full-HD frame. This RTL runs
that first pass in programmable logic next to the processor. It labels one pixel per
clock, in groups of four pixels per five clocks, so a 1920 x 1080 frame takes about
2.6 million clocks: 26 ms at 100 MHz.

On the processor side, software receives an image as a publish/subscribe message and
writes it into a FIFO. It then reads the labels from a second FIFO and publishes them
as another message. To the rest of the robot software, the hardware looks like any
other software component. This repository covers only the hardware between the two
FIFOs. The bus bridge that connects the FIFOs to the processor is third-party IP and is
not included. The FIFO ports of the top level mark where it would connect.

## What the core computes

The image is scanned in raster order. Each pixel `p` at (x, y) is labeled from four
neighbours that have already been labeled: left-up (x-1, y-1), up (x, y-1), right-up
(x+1, y-1) and left (x-1, y). This is 8-connectivity.

| pixel | neighbour labels | result |
|---|---|---|
| 0 (black) | any | 0 |
| non-zero (white) | all four are 0 | a fresh label: the last fresh label + 1 |
| non-zero (white) | at least one is non-zero | the smallest non-zero neighbour label |

Neighbours outside the image count as 0. At the start of every frame the fresh-label
counter is reset, so the first region of a frame gets label 1.

This is the first pass only. A U-shaped object keeps two labels, because its two arms
meet only further down the scan. The lower arm then takes the smaller label, but the
pixels above keep the larger one. Merging such equivalent labels is a second pass, and
this core does not contain it. Labels are 8 bits wide, so after 255 fresh labels in one
frame the counter wraps through 0. Images with more regions than that need a wider
`LABEL_W`, which also widens the line buffers.

## Data format on the FIFOs

Both FIFOs are 32 bits wide. Each input word carries four 8-bit pixels and each output
word carries four 8-bit labels. Pixel or label `x` of a line sits in bits
`8*(x%4)+7 : 8*(x%4)` of word `x/4`. Words follow in raster order, line after line, so
there are `WIDTH/4` words per line and no header. The image size is fixed by the
parameters `WIDTH` (1920) and `HEIGHT` (1080). `WIDTH` must be a multiple of 4 and at
most 2048. The core starts a frame as soon as the input FIFO holds a word, and it
expects exactly `WIDTH*HEIGHT/4` words per frame.

## Blocks

```
 host ──► fifo32 (in) ──► input_controller ──► memory_img (2 line slots)
                                                   │ pixel, 8 bit
                                                   ▼
                         state_controller ──► label_generator ──► label result
                         (sequencing, addresses,                    │
                          reference window)                         ▼
                                     ▲               label_data0 / label_data1
                                     │                 (ping-pong line buffers)
                                     └── read mux ◄────────┘
                                           │
 host ◄── fifo32 (out) ◄── output_controller
```

| module | role |
|---|---|
| `labeling_pkg` | widths, default sizes, address types, `phase_e` |
| `fifo32` | 32-bit synchronous FIFO, standard read timing (data one clock after `rd_en`), default depth 512 |
| `input_controller` | copies `WIDTH/4` words of one line from the input FIFO into a slot of `memory_img` |
| `memory_img` | 1024 x 32-bit RAM with an 8-bit read port, used as two 512-word line slots |
| `label_generator` | the labeling cell described above, one pixel per clock |
| `label_data` | 4096 x 8-bit line buffer for labels; two instances, `label_data0` and `label_data1` |
| `output_controller` | packs four labels per word and writes them into the output FIFO |
| `state_controller` | sequences a frame, drives all memory addresses, keeps the reference window |
| `labeling_top` | wires all of the above |

### label_generator

The cell has input registers for the pixel and the three previous-line references. A
fourth register holds the left reference and is loaded from the cell's own output. A
"current label" register feeds a +1 adder. Three pieces of combinational logic decide
the result: a white flag, an all-references-zero flag, and a minimum-of-non-zero
selector. These three drive the two output multiplexers.

Timing:
- `load` captures a pixel, and its label is valid in the next clock.
- The label stays valid until the next `load`.
- On that next `load` the label is committed: it becomes the left reference, and the
  counter advances if the label was fresh.

Because of this, pixels may arrive with idle clocks between them, and the output never
needs to wait for the next pixel.

### The per-line schedule (state_controller)

This is the part of the design that takes the most care. Each line `y` goes through a
three-stage pipeline:

```
I  issue   memory_img read of pixel x;  label read of prev[x+1]
D  data    pixel and prev[x+1] arrive; label_generator loads
           (left-up = prev[x-1], up = prev[x], right-up = prev[x+1])
E  result  label of x valid; written to the current line buffer at x
```

**Reference window.** The previous line's labels come through one 8-bit read path, but
the cell needs three of them per pixel. Two registers keep the two most recent labels
read, so each pixel needs only one new read, prev[x+1]. prev[0] is fetched in the idle
clock that opens the line. At the end of a line, and for the whole first line of a
frame, the references are forced to 0.

**Four pixels per five clocks.** Pixels are issued in groups of four, each followed by
one idle clock. A line therefore occupies `5*WIDTH/4` issue clocks, plus 2 clocks for
the pipeline to drain. For full HD that is 2402 clocks, against the 2400 given for the
original implementation. The idle clock of the first group is the one that prefetches
prev[0].

**Ping-pong line buffers.** Even lines are written into `label_data1` while
`label_data0` supplies the references. Odd lines swap the two roles. A read-data
multiplexer picks the buffer being read. Its select is registered so that it matches
the one-clock read latency.

**Overlap.** While line `y` is labeled, two other transfers run in parallel:
- `input_controller` loads line `y+1` into the other slot of `memory_img`. The slots are
  512 words each, at word address `{slot, index}`, and a full-HD line needs 480 words.
- The labels of line `y-1` go out to `output_controller`. These are exactly the labels
  the right-up reads fetch, in order, so the read multiplexer feeds both the reference
  window and the output path.

A frame therefore starts with a load-only phase for line 0 (`PH_LOAD`) and ends with a
flush of the last line (`PH_OUTPUT`). In between, each line costs one `PH_LABEL` phase
of 2402 clocks. A phase runs longer only if the next line has not arrived yet, or if
the output backs up.

**Stall.** `output_controller` lowers `ready` while it holds a complete word that the
output FIFO cannot take. While it is low, the issue stage of a line that sends output
stops, and the D and E stages drain. One label can be in flight when `ready` drops. It
always fits, because a word completes only with its fourth label.

### Status outputs of labeling_top

| port | meaning |
|---|---|
| `phase` | the current `phase_e` |
| `line_done` | one pulse per labeled line |
| `frame_done` | one pulse after the last word of a frame has entered the output FIFO |
| `label_alloc` | one pulse per fresh label |

Output words of line `y` appear while line `y+1` is being labeled.

## Performance

| quantity | this RTL (measured in simulation) | reported for the original design |
|---|---|---|
| clocks per line, labeling | 2402 | 2400 |
| clocks per 1920 x 1080 frame | 2,596,568 (first word in to `frame_done`) | 2.6 M |
| frame time at 100 MHz | 26.0 ms | 26 ms (32 ms including the software transfer) |

Synthesised generically at the default sizes, the core has 252 flip-flops and about 315
word-level cells, plus 128 Kbit of RAM: 32 Kbit `memory_img`, 2 x 32 Kbit `label_data`,
and 2 x 16 Kbit FIFOs. The published FPGA utilisation (about 4,100 registers and
LUTs, 3 RAMB36 and 11 RAMB18) also covers the bus bridge and its FIFOs, so the two are
not comparable one to one.

## Where this RTL departs from, or adds to, the original description

- **Line overlap and two image slots.** The original describes `memory_img` as storing
  one line, but it also reports 2,400 clocks per line and 2.6 M per frame. Those figures
  only hold if loading and output overlap labeling. Here the 1024-word memory, the size
  the original gives, holds two lines. How the original overlapped them is not known.
- **Address widths.** The original labels the memory addresses as 11 bits wide. Here
  `memory_img` addresses are that 11-bit line-relative index with a slot bit on top
  (12-bit pixel / 10-bit word address). The 4096-entry label buffers take 12-bit
  addresses, so the 11-bit index is zero-extended.
- **FIFO address pins.** The original block diagram shows address pins on the FIFOs.
  They are taken to be internal pointers and are not ports here.
- **Pixel addressing.** The text has `input_controller` feeding pixels to the labeling
  cell, but the block diagram has `state_controller` drive the image memory's read
  address. This RTL follows the diagram: `input_controller` only fills `memory_img`.
- **Choices made here, not taken from the original:**
  - byte order in a word, and output packing of four labels per word
  - FIFO depth
  - the start/done and ready/idle handshakes between controllers
  - frame start when input arrives, and the image size as parameters rather than taken
    from the message header
  - asynchronous active-low reset of the control logic; memories are not reset
  - "white" meaning any non-zero pixel
  - label counter reset per frame and wrapping after 255
- **Not included:** the second labeling pass (label merging), the bus bridge IP, and the
  processor-side software.

## Simulating

Every testbench is self-checking, ends with one `TB_RESULT checks=N failures=M` line, and
has a watchdog. With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/labeling_pkg.sv tb/tb_labeling_top.sv --top-module tb_labeling_top -o sim
./obj_dir/sim
```

Replace the testbench name to run another one.

| testbench | what it covers |
|---|---|
| `tb_label_generator` | 4000 random pixels and references against a model of the rule table, with idle clocks, line and frame starts |
| `tb_memory_img`, `tb_label_data`, `tb_fifo32` | memory contents, read latency, byte selection, FIFO full/empty against a queue model |
| `tb_input_controller`, `tb_output_controller` | word counts, slots, packing order, back-pressure from a randomly full FIFO |
| `tb_state_controller` | 16 x 4 image, two frames, with modelled neighbours (see below) |
| `tb_labeling_top` | 64 x 12 image, three frames, 8-word FIFOs, under host pauses |
| `tb_labeling_full` | one 1920 x 1080 frame with default parameters, under host pauses |
| `tb_labeling_rate` | one 1920 x 1080 frame with default parameters, with a host that never pauses |

`tb_state_controller` checks:
- every address and slot
- every reference presented to the cell
- the 5-per-4 timing of each line
- the ping-pong buffer order
- the output order

Input loads are made late and the output is made not ready at random, so that waiting
and stalls both occur.

`tb_labeling_top` and `tb_labeling_full` share one set of checks:
- Every output word is compared with a reference model of the first pass, run on a
  random image of rectangles, discs and dots.
- Each line's labeling phase must last 2402 clocks (or `5*WIDTH/4 + 2`), minus clocks
  spent stalled or waiting.
- The test fails if any of these never happens: fresh label, minimum selection, black
  pixel, writes to both line buffers, input FIFO empty during a load, output FIFO full,
  labeling stall.

`tb_labeling_rate` checks the frame time against 2,596,624 clocks. The two full-HD runs
take about ten seconds each.

To change the image size, set `WIDTH`, `HEIGHT` and `FIFO_WORDS` on `labeling_top`.
The memory sizes come from `labeling_pkg`.
