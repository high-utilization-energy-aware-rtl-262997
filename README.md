# A ring-streaming 8-bit CNN accelerator with output reuse and on-the-fly pooling

This is a convolution accelerator for the 3x3 and 1x1 layers of image CNNs. Its
core is an array of 32 x 4 process element arrays (PEAs). Each PEA is a 3x3 grid
of multipliers, so the core has 1152 multipliers. Every cycle the core produces
one output pixel for each of 32 output channels, summed over 4 input channels.

Three ideas keep the array busy and keep memory traffic low:

* **Ring streaming.** The 3x3 window snakes across the input map. It goes right
  along one band of rows, steps one row down, then comes back left. Two of the
  three rows of the next band are already inside the array, or in small register
  arrays beside it. So after the first band, each step reads only one new pixel
  per input channel from SRAM, and a group of H x W outputs takes H·W + 2 cycles.
* **Output reuse.** Partial sums for 32 output channels stay on chip in a feature
  SRAM. The sums for each following group of four input channels are added into
  them in place, by an adder on the SRAM write path. ReLU is applied by the same
  path when the last group is written.
* **On-the-fly pooling.** The feature SRAM stores two vertically adjacent pixels
  per word and has two ports. A 2x2 window therefore comes out in one read, and a
  row of Max units pools 32 channels at once. Pooled maps go either to external
  DRAM (a quarter of the data) or back into on-chip SRAM as the next layer's input.

All arithmetic is signed 8-bit. A product is rounded and shifted down by 2^7.
Every sum is saturated to 8 bits.

## Block map

```
                  ext_* (host / DRAM side)                  dram_* (256-bit stream)
                       |                                          ^
   +-------------------v------------------------------------------|---------+
   |  data unit                                                     |         |
   |   FSRAM1 <--ping-pong--> FSRAM2   WSRAM 32x32x72b   RSRAM 24KB |         |
   |     | col reads  ^ acc writes (add, ReLU)   | kernels          |         |
   |     v            |                          v                  |         |
   |   conv_controller ---- step ----> CCM: 32 x 4 PEAs + 4 reuse modules     |
   |     |                              (32 partial sums / cycle)   |         |
   |     +-- pool reads (2 words/channel) --> pooling_module -------+         |
   |                                          32 Max + 32 FIFO 128x8          |
   +--------------------------------------------------------------------------+
```

| file | block |
|---|---|
| `rtl/cnn_pkg.sv` | sizes (TM = 32, TN = 4, 8-bit data, 222-entry reuse arrays), shift modes, step and layer-config records, `sat8` |
| `rtl/pe.sv` | one multiplier with data, weight and sum registers and the quantizer |
| `rtl/pea.sv` | 3x3 PEs with a shift multiplexer per PE and an adder tree |
| `rtl/reuse_module.sv` | two 222-pixel register arrays and the 3-pixel preload for the up shift |
| `rtl/ccm.sv` | 32 x 4 PEAs, one reuse module per PEA column, 32 row adders |
| `rtl/dp_sram.sv` | dual-port SRAM bank with byte enables, one-cycle reads |
| `rtl/fsram.sv` | one feature SRAM: 32 banks, DPPR placement, padding on read, add/ReLU on write |
| `rtl/wsram.sv` | weight SRAM: 32 banks (kernels) x 32 rows (input channels) x 72 bits |
| `rtl/rsram.sv` | reuse SRAM: 32 x 256 x 16 bit for features plus 32 x 128 x 16 bit for pooling |
| `rtl/pool_fifo.sv` | 128 x 8-bit FIFO |
| `rtl/pooling_module.sv` | 32 Max units, 32 FIFOs and the DRAM / FSRAM output multiplexer |
| `rtl/conv_controller.sv` | the layer sequencer |
| `rtl/cnn_accel_top.sv` | the whole accelerator |

## The ring streaming walk

This is the least obvious part of the design, and the controller, PEA and reuse
module all depend on it.

A PEA holds a 3x3 window of one input channel. All 32 PEAs in a column (one per
output channel) see the same pixels, so they shift together. Take a map of H rows
and W columns with one pixel of zero padding around it. Output row b needs input
rows b-1, b and b+1; call this *band b*.

1. **Band 0, front pass, moving right.** The window starts off the left edge. At
   each step, image column x = k-1 is read from the FSRAM as three pixels (rows
   -1, 0 and 1; row -1 is padding and reads as zero). It enters PE column 0 while
   everything shifts right. The first two steps only fill the array. From step 2
   on, each step completes output (0, x-1). The pass takes W + 2 steps, and the
   last one brings in padding column W.
2. **Up shift.** The window drops one row, keeping its columns, and the three
   pixels of the new bottom row enter PE row 2. Those pixels were collected
   during the pass by the *preload* register: every column read during a pass
   returns one extra pixel (the row below the band), and the preload keeps the
   last three. The up shift produces output (b, W-1) or (b, 0) straight away, so
   it costs no extra cycle.
3. **Band b ≥ 1, moving left or right.** The direction alternates: odd bands move
   left, even bands move right. Each step brings in one column. Its two upper
   pixels (rows b-1 and b) are the two lower pixels of the same column from the
   previous band, which the reuse module saved when that column left the array.
   Only the bottom pixel (row b+1), plus the preload pixel (row b+2), comes from
   the FSRAM. W-1 steps finish the band.

So band 0 costs W + 2 steps and every other band costs W, giving H·W + 2 per
input-channel group.

**Why the kernel is mirrored.** New columns enter PE column 0 when the window
moves right, so PE column j holds window column 2-j. The weight byte for
PE (r, j) is therefore byte 3r + (2 - j) of the kernel word (raster order,
byte 0 at bits 7:0).

**Reuse addressing.** Each reuse array is indexed by image column. A pass stores
at most W - 2 columns, so 222 entries support maps up to 224 columns wide.

| pass | stores the column leaving the array | reads the column entering |
|---|---|---|
| right (front or later) | column c at address c | column x at address x - 2 |
| left | column c + 2 at address c | column x at address x |

With these rules, every address is read exactly one step before the same pass
overwrites it. `tb_conv_controller` checks that each read finds the column it
wants, written during the band before.

## Feature SRAM and the double-pixels-per-row placement

Each FSRAM has one dual-port bank per channel (32 banks of 2048 x 16 bits,
128 KB). Pixel (row, col) sits in word (row/2)·W + col: in the low byte when
the row is even, in the high byte when it is odd. This placement gives three
things:

* **Column reads.** One read on both ports returns four consecutive rows of a
  column: enough for the three rows of a front-pass column, or for the new bottom
  pixel plus the preload pixel. Rows outside the map, columns outside it and row
  -1 come back as zero. Padding is never stored.
* **Pooling reads.** Words 2c and 2c + 1 of word row r together hold the 2x2
  window of pooled pixel (r, c).
* **Partial-sum writes.** A write either stores the new sum (first group) or reads
  the stored sum on port B and writes back the saturated sum one cycle later on
  port A, with a byte enable. On the last group a negative result is replaced by
  zero (the MAX on the write path, used as ReLU).

A map fits in one pass when H·W ≤ 4096 and W ≤ 224.

## Pipeline and timing

| event | cycle |
|---|---|
| controller issues FSRAM column read | t |
| registered step reaches the core, read data arrives | t + 1 |
| PE sum registers, PEA adder trees, row adders | t + 2 .. t + 4 |
| 32 saturated partial sums (`psum_valid`) | t + 5 |
| partial-sum write into the destination FSRAM (read on B) | t + 5 |
| add result written on port A | t + 6 |

The controller delays each step's output coordinate, add flag and ReLU flag by
five cycles, so they meet the core's sums. After the last step it waits for this
pipeline to drain before pooling starts.

A layer pass runs:

* **Weight load:** 4 cycles per group, each reading one WSRAM row into one PEA
  column of all 32 rows.
* **Convolution:** H·W + 2 cycles per group of four input channels (3x3), or H·W
  cycles (1x1).
* **Drain:** 7 cycles.
* **Pooling:** one 2x2 window every two cycles while the FIFOs have room, then a
  wait until every pooled beat has left.

For example, a 64 x 64 layer with 32 input channels takes 8 x (4 + 4098) cycles
of weight load and convolution.

## 1x1 convolution

In 1x1 mode each step loads all PEs directly. PE (r, j) of PEA column c takes
input channel 9c + 3j + r of the current pixel, and byte 3j + r of the WSRAM word
for column c. So one PEA row covers 32 input channels, with the last four PEs
idle, and gives one output channel per row. WSRAM rows 0 to 3 hold input channels
0-8, 9-17, 18-26 and 27-31 of each kernel. The pixels of all 32 channels come from
the source FSRAM in the same column read.

## On-the-fly pooling

After the last group, the controller reads one window per two cycles from the
destination FSRAM. Each Max unit reduces its channel's two words to the largest
of four signed pixels and pushes the result into its 128-entry FIFO. The output
multiplexer then drains the FIFOs in one of two ways:

* **To DRAM:** one 256-bit beat per pooled pixel, byte m = channel m, in raster
  order. `dram_valid`/`dram_ready` may stall it at any time; the FIFOs absorb the
  stall and the controller stops issuing windows when they are full.
* **To the FSRAM:** four 64-bit beats per pooled pixel (channels 0-7, 8-15,
  16-23, 24-31). They are written into the *source* FSRAM at the pooled geometry
  (H/2 x W/2, same placement), where they become the next layer's input.

## Using the top

1. While `busy` is low, write the input map into the source FSRAM (`ext_target`
   0 or 1, `ext_bank` = channel, `ext_addr` = word address). Write kernels into
   the WSRAM (`ext_target` 2, `ext_bank` = output channel, `ext_addr` = input
   channel, 72-bit words).
2. Set `cfg`:
   - `h`, `w`: map size.
   - `n_groups`: number of 4-channel input groups, 1 to 8.
   - `k1x1`: select 1x1 mode.
   - `relu`: apply ReLU.
   - `pool`: pool the output, with `pool_dram` choosing DRAM or FSRAM.
   - `src_sel`: 0 reads FSRAM1 and writes FSRAM2; 1 does the reverse.
   - `acc_cont`: continue the sums of an earlier pass (see below).

   Then pulse `start`.
3. Collect pooled beats on `dram_*`, or wait for `done`. Then read the output from
   the destination FSRAM (or the pooled map from the source FSRAM) through `ext_*`.
   Reads return `ext_q` one cycle after the request.

A layer with more than 32 output channels is run again with the next 32
kernels. A layer with more than 32 input channels is run as several passes into
the same destination: reload the source FSRAM and WSRAM with the next 32 input
channels and set `acc_cont`, which makes the first group add into the stored
sums instead of overwriting them; set `relu` only on the last pass. The next layer uses the other `src_sel`.

## Where this design departs from, or adds to, the published one

* **Not sequenced:**
  - stride-2 convolution;
  - input channel decomposition, which spreads sections of a 3-channel first
    layer over all four PEA columns;
  - splitting a map larger than one FSRAM into sections joined through the reuse
    SRAM.

  The reuse SRAM is built at its published 24 KB but can only be reached through
  `ext_*`. So a map above 4096 pixels per channel must be split by the host, with
  its overlapping rows handled there. More than 32 input channels only needs
  passes continued with `acc_cont`. For RGBD eCNN this means the 64 x 64,
  32 x 32 and 16 x 16 layers run on chip as they are. The 256 x 256 and
  128 x 128 layers need host-side splitting.
* **Depthwise convolution** (as in MobileNet) has no mode.
* **Not specified by the published design,** so these are this design's choices:
  - the quantizer (round, shift by 7, saturate);
  - saturation of every sum;
  - using the write-path MAX as ReLU;
  - the word address formula;
  - the fourth pixel in column reads (which feeds the preload);
  - the reuse addressing;
  - the mirrored kernel placement;
  - the pipeline depths;
  - the output packing of the pooling module;
  - the split of the reuse SRAM (256 feature words and 128 pooling words per
    bank);
  - the `acc_cont` flag for continued passes;
  - all handshakes and the host port.
* **SRAMs** are written as arrays (`dp_sram`); a real chip would use memory
  macros.

## Verification

Every block has a self-checking testbench in `tb/` (`tb_<module>.sv`) that
compares it against an independent model. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_pea`, `tb_ccm`: shift patterns and sums against a software window model.
  `tb_ccm` runs the full 32 x 4 array with real ring walks.
* `tb_conv_controller`:
  - step counts (H·W + 2 per group);
  - the ring walk;
  - every reuse read finding the right column;
  - partial-sum writes exactly 4 cycles after their step, covering every output
    once;
  - the pooling issue rate and write-back order.
* `tb_fsram`: column reads with padding, pooling reads, and add/ReLU/masked writes
  against a pixel model.
* `tb_cnn_accel_top`: three layer passes on the default-size accelerator, compared
  with a reference convolution:
  - 3x3 with two groups, ReLU and pooling to a stalling DRAM;
  - 3x3 on an odd-sized map with the ping-pong roles swapped;
  - 1x1 over 32 channels with pooling back into the FSRAM;
  - 3x3 over 64 input channels, run as two passes with `acc_cont`.

  It counts every mechanism (front pass, up shifts, left and right passes, reuse
  reads, padding, group accumulation, ReLU, both pooling destinations, DRAM
  back-pressure, 1x1 steps, both ping-pong directions, a continued pass) and fails if any of them
  never occurs.

* `tb_workload_rgbd_ecnn`: the RGBD eCNN layer shapes that fit on chip, at full
  channel count, on the default-size accelerator:
  - 16 x 16 with 32 and with 64 input channels;
  - 32 x 32 pooled to DRAM;
  - 64 x 64, which fills the FSRAM banks, pooled back into the FSRAM.

  Each convolution takes exactly 8 x (H·W + 2) cycles per 32 input channels.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_cnn_accel_top \
    -y rtl -y tb +libext+.sv rtl/cnn_pkg.sv tb/tb_cnn_accel_top.sv
./obj_dir/Vtb_cnn_accel_top
```

The end-to-end test runs at the default sizes in under a minute.
