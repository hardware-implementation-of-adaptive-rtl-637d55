# Adaptive bit-plane watermark embedder driven by MSB disorder

This is synthesizable SystemVerilog for a spatial-domain image watermark
embedder that adapts its strength to the local content of the image. It
follows the architecture published as "Hardware Implementation of Adaptive
Watermarking Based on Local Spatial Disorder Analysis" (Hajabdolahi, Karimi,
Shirani, Samavi). The RTL, the testbenches and this text are an independent
implementation of that description. They are not the authors' code.

## The idea

The image is cut into non-overlapping 3x3 blocks, and each block carries
one watermark bit. That is 1/9 bit per pixel.

Changes are hardest to see in busy image regions, so a busy block can take
a stronger (more significant) change than a smooth one. The design needs a
measure of "busy" that costs almost no hardware. It uses the most
significant bit-plane. Count the ones among the nine MSBs of a block and
call the count S:

| S | block type | watermark plane | enhancement plane |
|---|---|---|---|
| 4, 5, 6 | disordered (busy) | 5 (bit 4) | 4 (bit 3) |
| 0, 1, 2, 3, 7, 8, 9 | ordered (smooth) | 3 (bit 2) | 2 (bit 1) |

Planes are numbered from 1 (LSB) to 8 (MSB). All nine pixels of a block get
the same bit in the chosen plane.

If the MSBs are mixed, the block straddles the middle grey level. That
usually means an edge or texture. If they are nearly all equal, the block is
one side of the middle and is likely smooth.

The MSB plane itself is never written, so the classification survives
embedding. A receiver can repeat it on the watermarked image, pick the same
plane and recover the bit by majority vote: more than four of the nine
pixels must show a one. The hardware here only embeds. The vote exists only
in the testbenches' reference model (`tb/wm_ref_pkg.sv`, function `extract`).

### The enhanced method (default)

Simply overwriting bit k+1 with the watermark bit w changes the pixel by
2^(k+1) half of the time. The expected squared error is 2·4^k.

The enhanced method writes the pair "w, not w" into bits k+1 and k. The
pixel then moves to the nearest value whose two bits read `w w̄`. Its
expected squared error is 1.5·4^k, so the MSE drops by a quarter. That is
about +1.25 dB PSNR at the same strength. Extraction is unchanged because it
reads only bit k+1.

`ENHANCED = 1` selects this method. `ENHANCED = 0` gives the basic method,
which changes the watermark plane only.

## Datapath

```
             img_* (host)                         wm_* (host)
                 |                                    |
        +----------------+                   +----------------+
        | input image RAM|  one line / clk   | watermark RAM  |  one W/3-bit word per stripe
        +----------------+                   +----------------+
                 | line                              | wm_word
        +----------------+   3 lines    +---------------------------+
        |  line_buffer   |------------->|     stripe_embedder       |
        | (Row 1..Row 3) |              |  W/3 x block_embedder:    |
        +----------------+              |   congestion_analyzer     |
                 |  original lines      |   + 9 embedding_modules   |
                 |                      +---------------------------+
                 |                                   | watermarked lines
                 +----------------> +------------------------+
                       (bypass)     |   output_row_buffer    |
                                    +------------------------+
                                                 | one line / clk
                                    +------------------------+
                                    |   output image RAM     |---> res_* (host)
                                    +------------------------+
```

`wm_controller` sequences all of this.

### Congestion analyzer (`congestion_analyzer`)

- **MSB extraction** is wiring: bit 7 of P1..P9.
- **MSB summation** (`msb_compressor`) is a 9:4 compressor made of five
  full adders and two half adders:
  - Rank 1: three full adders reduce the inputs in threes.
  - Rank 2: one full adder adds the three weight-1 sums, which gives S[0].
    Another full adder adds the three weight-2 carries.
  - Rank 3: one half adder produces S[1]. A second half adder produces S[2]
    and S[3].
- **Type indicator** (`type_indicator`) flags S ∈ {4,5,6}. S never exceeds
  9, so this reduces to three gates: `~S[3] & S[2] & ~(S[1] & S[0])`.

The original drawing gives the adder cell count and the three-gate size of
the indicator, but not every wire. The grouping above is one wiring with
that cell count. Any such wiring computes the same S.

### Embedding module (`embedding_module`)

There are four 2:1 multiplexers per pixel. Their select is the block type
(1 = disordered).

| output bit | select = 1 (disordered) | select = 0 (ordered) |
|---|---|---|
| W5 (bit 4) | w | P5 |
| W4 (bit 3) | ~w | P4 |
| W3 (bit 2) | P3 | w |
| W2 (bit 1) | P2 | ~w |
| W8..W6, W1 | P8..P6, P1 | same |

With `ENHANCED = 0` only the W5 and W3 multiplexers exist.

### Stripe embedder and block embedder

A `block_embedder` is one analyzer feeding nine embedding modules. The
`stripe_embedder` places W/3 of them side by side, so a whole stripe of
three full image lines is watermarked in one combinational step.

Block b of a stripe covers columns 3b..3b+2 and uses watermark bit b of the
stripe's word. The pixels of a block are numbered P1..P9 in raster order.

## The line pipeline and its timing

The image streams through one line per clock. Lines are grouped in stripes
of three: stripe g holds lines 3g, 3g+1 and 3g+2.

In the table below, cycle 0 is the cycle in which `start` is high.

| event | cycle |
|---|---|
| input RAM read of line j issued | j + 1 |
| line j stored in line buffer slot j mod 3 | j + 2 (end of) |
| watermark word of stripe g read (issued with line 3g+2) | 3g + 3 |
| stripe g embedded, loaded into the output row buffer | 3g + 5 (end of) |
| line j written into the output image RAM | j + 6 |
| `done` pulse | H + 6 |
| `busy` high | 1 .. H + 5 |

So the first watermarked line is written six cycles after start. An image
of N lines takes N + 6 clocks, and in the steady state one line enters and
one line leaves every clock. Both figures match the published design.

The output row buffer holds stripe g while its three lines are written in
cycles 3g+6 to 3g+8. In the last of those cycles stripe g+1 replaces it,
which is why three output registers are enough. An assertion in
`wm_controller` checks that a stripe is never overwritten before it has been
written out.

### Image edges

Stripes are whole lines of 3x3 blocks. Two edge cases are rules of this
design; the original description does not mention them:

- **Edge columns.** When the width is not a multiple of three, the last
  one or two columns belong to no block. They pass unchanged.
- **Short last stripe.** When the height is not a multiple of three, the
  last stripe has one or two lines. It keeps the timing of a full stripe
  but is loaded through the bypass path of the output row buffer, so it
  also passes unchanged. This keeps the N + 6 latency for every N.

The default 256 x 256 image therefore holds 85 x 85 = 7225 blocks, which
means 7225 watermark bits. Its last column and last line are copied
unchanged.

## Interface of `wm_top`

| parameter | default | meaning |
|---|---|---|
| `IMG_W` | 256 | pixels per line |
| `IMG_H` | 256 | lines |
| `ENHANCED` | 1 | 1 = enhanced method, 0 = basic method |

| port | width | use |
|---|---|---|
| `clk`, `rst_n` | 1 | clock; asynchronous active-low reset |
| `start` | 1 | a one-cycle pulse while idle starts an image |
| `busy`, `done` | 1 | running; one-cycle pulse at the end |
| `img_we`, `img_waddr`, `img_wdata` | 1, log2(H), W·8 | write one input line; pixel c is at bits [8c +: 8] |
| `wm_we`, `wm_waddr`, `wm_wdata` | 1, log2(H/3), W/3 | write the watermark word of one stripe; bit b belongs to block b |
| `res_re`, `res_raddr`, `res_rdata` | 1, log2(H), W·8 | read one watermarked line; data one cycle after `res_re` |

To use the block:

1. Write all H input lines and all H/3 watermark words.
2. Pulse `start`.
3. Wait for `done`.
4. Read the result.

Do not write the input RAMs or read the output RAM while `busy` is high.
All three memories are plain arrays (`sync_ram`) with one write port and one
registered read port, so a synthesis tool can map them to block RAM.

The host ports are this design's choice. The original description only says
that there are three internal RAMs: input image, output image and watermark.

## Size

At the defaults, the following are counted after a generic coarse synthesis:

- 12,346 flip-flop bits:
  - two banks of 3 x 256 x 8 line registers;
  - about 60 bits of control.
- 2 x 524,288 bits of image RAM.
- 7,225 bits of watermark RAM.

The published Virtex-4 implementation reports 12,191 flip-flops. That
figure is consistent with this structure. Logic grows linearly with
`IMG_W`: one analyzer per block column and four multiplexers for every
pixel of the three stripe lines. Memory grows with `IMG_W x IMG_H`.

The published Spartan-3 figure (29 LUTs, 16 slices) is for the embedding
logic of a single block, which corresponds to one `block_embedder` here.
No FPGA timing or LUT count is claimed here. The published 13.7 ns (for the
embedding logic on Spartan-3) and 172 MHz (pipelined, Virtex-4) figures are
device results that this RTL has not been taken through.

## What follows the source and what does not

These parts follow the original description:

- classification by MSB count with the sets {4,5,6} / others;
- planes 5 and 3;
- the enhanced inverted bit one plane lower;
- the 5 FA + 2 HA adder;
- the three-gate type indicator;
- the multiplexer embedding module;
- three row registers feeding one analyzer per block and an embedding
  module per pixel;
- three output row registers;
- one line read per clock;
- N + 6 clocks per image and a first result after six clocks;
- three internal RAMs;
- capacity of 1/9 bit per pixel.

These parts are this design's own choices:

- The image size defaults to 256 x 256, because the source gives no size.
- The exact adder wiring.
- Line buffer slots are loaded by index rather than shifted.
- The split of the pipeline into read, store, embed and write stages.
- The start/busy/done handshake and the host ports.
- The RAM organisation: one word per line, and one watermark word per
  stripe.
- The reset behaviour.
- Both edge rules.
- Extraction is not built in hardware, because the source only describes
  it as a processing step.

Images of 512 x 512, which is the usual size of several standard test
images, need `IMG_W = IMG_H = 512`. That doubles the line registers and
quadruples the RAMs.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_msb_compressor` | all 512 MSB patterns against a bit count |
| `tb_type_indicator` | S = 0..9 |
| `tb_congestion_analyzer` | every S, plus random blocks |
| `tb_embedding_module` | every pixel value × bit × type, for the enhanced and basic methods |
| `tb_block_embedder` | random and directed blocks; round trip through the majority-vote extractor |
| `tb_stripe_embedder` | an 11-pixel stripe (three blocks and two edge columns) |
| `tb_line_buffer`, `tb_output_row_buffer`, `tb_sync_ram` | register and memory behaviour, including bypass, read latency, hold and read-before-write |
| `tb_wm_controller` | every control output, cycle by cycle, against the schedule above, for H = 3, 9, 10, 11 (done exactly H + 6 after start) |
| `tb_wm_top` | end to end at 11x10, 9x9 (basic), 12x11 and 30x30, two images each |
| `tb_wm_top_full` | one 256 x 256 image at the default parameters |
| `tb_psnr_compare` | enhanced and basic embedders on the same 256 x 256 synthetic image |

More detail on the end-to-end tests:

- **`tb_wm_top`** checks every pixel, the recovered watermark and the
  latency. It fails unless each mechanism occurs at least once: both block
  types, all ten MSB counts, edge pass-through, short-stripe bypass,
  overlapped read and write, and the basic method.
- **`tb_wm_top_full`** runs the default configuration. It checks all
  pixels, the latency of 262 cycles and extraction, and reports the PSNR.
- **`tb_psnr_compare`** checks that the MSE ratio enhanced/basic is near the
  theoretical 0.75 (measured: about 0.76).

Test images are built block by block with a random MSB count, so both block
types and every S value occur. The natural test images of the original
evaluation are not used. Robustness numbers such as NC after JPEG, median
filtering or noise are properties of the algorithm, not of the RTL, and are
not reproduced.

To simulate with Verilator 5, run from the folder that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
  rtl/wm_pkg.sv tb/wm_ref_pkg.sv tb/tb_wm_top.sv --top-module tb_wm_top
./obj_dir/Vtb_wm_top
```

Replace `tb_wm_top` with any other testbench name. The package files must
come first. The full-size runs take about half a minute to build and well
under a second to simulate.
