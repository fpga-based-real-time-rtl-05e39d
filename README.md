# SMARTPIX back-end: real-time image manipulation and RDMA acquisition

SMARTPIX is a photon-counting X-ray detector built from Medipix3RX readout
chips (256 x 256 pixels each). Two front-end boards read the chips and send
their pixels, interleaved, over one optical link each to a back-end FPGA. The
back-end's job is to turn those raw interleaved streams into finished images
in memory, at link speed, and then push them into the receiving computer
without CPU involvement. Everything a CPU would otherwise have to do per pixel
happens on the way into the FPGA's DDR4:

* de-interleaving the chips' streams and widening 6/12-bit counters to bytes,
* rotating each chip's image by 0, 90, 180 or 270 degrees,
* accumulating n frames, or joining two 12-bit counters into 24-bit pixels,
* splitting spectroscopic frames into sub-images,
* placing every line at its final address, leaving gaps for dummy pixels
  between chips and modules.

A RASHPA data channel then copies the stored frames line by line, through two
DMA engines used in ping-pong, into buffers of the receiving computer.

This repository holds SystemVerilog for that logic, following the SMARTPIX
back-end as published by its designers (Mansour et al., "FPGA Based Real-Time
Image Manipulation and Advanced Data Acquisition for 2D-XRAY Detectors").
That publication gives the block structure, the memory sizes and what each
block does, but little of how each one works inside. The insides here, and
every point marked *design choice* below, are this implementation's own.

```
 link 0 --> [ diu_sequence 0 ] --write--\
 link 1 --> [ diu_sequence 1 ] --write---+--> (AXI interconnect, DDR4)
            [ mem_clear      ] --write--/            |
            [ rashpa ] --descriptors--> (2 x CDMA) --+--> (PCIe, host buffers)

 diu_sequence:
   deinterleaver -> rotation -+-----------------------------+-> ddr_writer
                              +-> acc24 -+------------------+
                              |          +-> spectro -------+
                              +-------------> spectro ------+
```

Parts in parentheses are vendor IP or external parts (Aurora link cores, AXI
interconnect, DDR4 controllers, AXI CDMA, PCIe endpoint). They are not built
here. Their connections are ports of the top, `smartpix_backend`.

## Files

| file | contents |
|---|---|
| `rtl/smartpix_pkg.sv` | shared constants, enums (pixel mode, angle, accumulation mode, dispatch rule) and structs (`ddr_wr_t`, `cdma_desc_t`, `diu_cfg_t`, `rashpa_cfg_t`) |
| `rtl/dp_ram.sv` | dual-port RAM with byte-enable write and held read register (BRAM / URAM) |
| `rtl/deinterleaver.sv` | link stream to per-chip lanes |
| `rtl/rotation.sv` | 32-bank ping-pong rotator |
| `rtl/acc24.sv` | accumulation / 24-bit joining over 8 URAM banks |
| `rtl/spectro.sv` | even/odd line splitter |
| `rtl/ddr_writer.sv` | line placement in DDR |
| `rtl/diu_sequence.sv` | one board's pipeline with its path multiplexers |
| `rtl/mem_clear.sv` | DDR initializer |
| `rtl/rashpa.sv` | RASHPA data channel |
| `rtl/smartpix_backend.sv` | top |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/frontend_model_pkg.sv` | front-end stand-in and expected-image model used by the pipeline tests |

## Streams and handshakes

Every block-to-block connection is an AXI-stream-like `data / valid / ready`
triple. A beat moves when `valid && ready`, and a producer holds its data
stable while `ready` is low. Assertions check this on the outputs of
every block that drives a stream or a write port. Back-pressure
from DDR reaches back to the link. Beats are 256 bits up to the rotation
block and 512 bits after accumulation or spectroscopic splitting.
Configuration is static during an acquisition. All blocks use one clock and an
asynchronous active-low reset. RAM contents are not reset.

## The link format and the de-interleaver

A link beat is 256 bits, split into eight 32-bit slots. With N chips under
acquisition (N = 1, 4 or 8), slot s belongs to chip `s mod N`, with chip 0 in
the lowest slot. Each chip's pixels run LSB-first through its slots, beat
after beat. Three beats (768 bits) therefore carry 64/N 12-bit or 128/N 6-bit
pixels of each chip.

The de-interleaver collects three beats and emits four. Each pixel is widened
to 16 or 8 bits, so that pixels are byte aligned. In every output beat chip c
owns the lane `[c*256/N +: 256/N]`, holding its next pixels in row order. The
four-beat block is double-buffered against the next three input beats, so the
output can run at one beat per cycle. 1-bit mode takes a separate path: one
beat in, one beat out, with the slots regrouped into lanes and no widening.
24-bit acquisitions arrive as two 12-bit frames and pass through as 12-bit.

*Design choices:* the slot-to-chip rule follows the published figure. The
bit order inside a chip's stream and the zero-extension are assumed.

## Rotation: how 32 RAMs rotate eight chips at once

This is the least obvious block. The rotator has a writer, 32 block RAMs and
a reader. The RAMs hold two complete frames of eight chips at 16 bits per
pixel (32 x 8192 words x 64 bits = 16.8 Mbit). So one frame can be written
while the previous one is read. The latency is exactly one image, and both
sides move one 256-bit beat per cycle.

The difficulty is bandwidth in both directions at once. In one cycle the
writer receives P = 16/N consecutive pixels of one row *for each chip* (8-bit
mode: 32/N). After rotation by 90 or 270 degrees these P pixels belong to P
different output rows of one column. In one cycle the reader must deliver 16
(or 32) consecutive pixels of one output row of one chip. Both access
patterns must hit different RAMs, or different byte lanes of one RAM word, in
every cycle, whatever mix of angles the chips use.

The mapping that does this:

```
B = 32 / N                 banks owned by each chip
Q = 16 (16-bit) or 32 (8-bit)  pixels per beat
G = max(B, Q)

rotated pixel (r, c) of chip k  ->
    bank  = k*B + (r + c) mod B
    lane  = (c / B) mod (G / B)            (16- or 8-bit lane of the 64-bit word)
    word  = buffer*4096 + r*(256/G) + c/G
```

* Chips never share a bank, so the writer's N chips never collide, whatever
  their angles.
* The skew `(r + c) mod B` puts P consecutive pixels of a row *and* P
  consecutive pixels of a column into P different banks. The writer can place
  a whole beat in one cycle for any angle.
* The Q consecutive pixels of an output row that the reader needs fall on
  distinct (bank, lane) pairs, at one address per bank.
* Writes use the RAMs' byte enables, because they fill individual lanes.

The writer computes each pixel's rotated position (clockwise: 90 degrees
sends input (y, x) to (x, 255 - y); 180 to (255 - y, 255 - x); 270 to
(255 - x, y)) and from it the bank, lane and word. The reader walks
output row r over chips 0..N-1, reading 256/Q beats per chip row. It
reassembles the beat from the registered RAM outputs one cycle later. Its
output is therefore *line-interleaved*: row 0 of chip 0, row 0 of chip 1, and
so on. Two `full` flags handle the ping-pong. The writer stalls only if the
frame buffer it needs is still being read, and the reader starts as soon as a
frame is complete.

*Design choices:* the mapping, the clockwise sense, the output order and the
64-bit bank width are this implementation's. The published text only says
that the writer's start address depends on the angle and shifts with the
number of chips. It also gives the bank size as "128 kbits each", which does
not agree with its own "two frames of eight chips at 16 bits" (that needs
512 kbit per bank). The two-frame capacity is the one followed here.

### 1-bit frames

In 1-bit mode a chip row is only 256 bits, four bank words, and only 0 and
180 degrees are offered. Word w of rotated row r of chip k lives in bank
k*B + w at word r. Each input beat carries 256/N bits per chip, and the
writer drops them into the row image with byte enables. If the beat holds
columns x0 onward of row y, they go to the same columns of row y for 0
degrees. For 180 degrees they are bit-reversed and go to row 255 - y,
starting at column 256 - 256/N - x0. The reader sends one whole chip row per beat, from four banks
at once. Any angle other than `ROT_180` acts as 0 in this mode.

## Accumulation and 24-bit pixels (`acc24`)

Both modes share eight 64-bit URAM banks, which together form one 512-bit
word per input beat. Input pixels are 16 bits (16 per beat) and output pixels
are 32 bits (16 per 512-bit beat).

* **Accumulate n frames.** The first frame is stored. Each later frame reads
  the stored partial sums, adds, and writes the result into the *other*
  buffer, so a read and a write to different places happen every cycle. During
  the n-th frame the sums are sent out instead of stored.
* **24-bit mode.** The first frame of a pair (taken as the low counter) is
  stored. The second leaves as `(high << 12) | low`.

This is a two-stage pipeline: RAM read, then add and write or output. An
output beat follows its input by two cycles. Depth: two 8-chip frames
(65536 words per bank). The frame length is taken from the chip count
(4096 beats per chip).

## Spectroscopic splitting (`spectro`)

In spectroscopic mode the four pixels of every 2 x 2 cell belong to four
sub-images: even rows alternate sub-images 1 and 2, odd rows 3 and 4. The
splitter writes the even pixels of each input beat into one BRAM and the odd
pixels into another, 256 bits each. Once a line is complete, the reader sends
it out as 512-bit beats, first all even pixels and then all odd ones, while
the next line fills the other half of the BRAMs. This costs one line of
latency and no throughput. Input comes from the rotation block (16-bit pixels,
zero-extended to 32) or from `acc24`. *Design choice:* each line is
reordered in place. Sub-images 1|2 and 3|4 end up side by side in alternate
rows; rows are not regrouped vertically.

## Placing frames in DDR (`ddr_writer`, `mem_clear`)

The DDR writer gets a start address, a line size, a line stride and a block
stride. Lines arrive line-interleaved over the N chips, as the rotator sends
them, so line i goes to

```
start + (i mod N) * block_stride + (i div N) * line_stride + offset in line
```

For example, four chips side by side at 16 bits per pixel use line size 512,
block stride 576 and line stride 2304: each chip line is followed by a
64-byte gap. The gaps are never written. They keep whatever the memory
initializer put there, and become the dummy pixels between chips and modules.
Writes follow the AXI byte-lane rule: a 32-byte beat sits on the lanes its
address selects, and `strb` marks them. `frame_done` pulses when the last write of a frame
is accepted.

`mem_clear` fills a region with a 32-bit value, one 64-byte beat per cycle. It
starts by itself after reset, and again on `start`. The top holds the
pipelines' writes back until it has finished.

## RASHPA data channel

The receiving computer allocates local buffers (LB). Together they form the
RASHPA buffer (RB). The channel is configured with source rules (address,
line size, line stride, line count, block stride, block count), destination
rules (first LB index, offset, line stride, block stride) and dispatch
parameters (LBs in the RB, blocks per LB, blocks per group, rule). Each
trigger moves every source block once, one CDMA transfer per line:

```
src = src_addr + b*src_block_stride + l*src_line_stride
dst = lb_base[lb] + dst_offset + slot*dst_block_stride + l*dst_line_stride
```

Here `slot` counts blocks within an LB, and `lb` counts from `dst_index`
modulo the number of LBs. The rules:

* **global overwrite**: each trigger restarts at the first LB, slot 0.
* **global concatenate**: the position carries on from trigger to trigger.
  When every LB is full, the channel stops and raises `rb_full`.
* **circular**: the position carries on and wraps to the first LB.

`group_done` pulses every `nb_blocks_in_group` blocks. Transfers alternate
strictly between the two CDMA descriptor ports; `ready` on a port means that
engine is idle. In the top, a trigger is issued once both pipelines have
written a frame. *Design choices:* the published description names these
rules but does not define them. The semantics above, the per-line transfers
and the trigger are this implementation's reading. The software side
(LIBRASHPA) and a register interface for the rules are not included: the
rules are input ports.

## Configuration (`diu_cfg_t`)

| field | meaning |
|---|---|
| `nchips` | 1, 4 or 8 chips on this link |
| `pix` | `PIX_1`, `PIX_6` (stored as 8 bits), `PIX_12` (16 bits), `PIX_24` (two 12-bit frames) |
| `angle[k]` | rotation of chip k |
| `acc_mode`, `acc_nframes` | `ACC_OFF`, `ACC_SUM` with n, or `ACC_SHIFT` (24-bit) |
| `spectro_en` | spectroscopic splitting |
| `ddr_start`, `ddr_line_size`, `ddr_line_stride`, `ddr_block_stride` | DDR placement |

Stored pixel size: 16 bits (12-bit mode) or 8 bits (6-bit mode) on the plain
path, and 32 bits whenever accumulation, 24-bit mode or spectroscopic mode is
on. Lines are then 512, 256 or 1024 bytes, and 32 bytes for 1-bit frames.

## Sizes

| parameter | default | origin |
|---|---|---|
| rotation banks x words x bits | 32 x 8192 x 64 | 32 banks, two 8-chip 16-bit frames (published); width/depth split chosen |
| acc24 banks x words x bits | 8 x 65536 x 64 | "eight URAMs" (published) read as eight banks; depth chosen for two 8-chip 32-bit frames, so each bank is built from several physical URAMs |
| spectro line buffer | 2 x 16 x 512 bits | two lines of 256 pixels (chosen) |
| local buffers | up to 16 | chosen |

All defaults simulate and compile as given; nothing is scaled down.

## Verification

Each testbench drives its block, predicts the outputs on its own, counts
checks and failures, and ends with a `TB_RESULT checks=... failures=...` line.
A watchdog ends a hung run as a failure.

* `tb_deinterleaver`: all chip counts and pixel modes, random stalls,
  4 beats per 3 and full output rate.
* `tb_rotation`: full 256 x 256 chips, 1/4/8 chips, every angle and a mix,
  1-, 6- and 12-bit; latency of one frame and one beat per cycle are checked.
* `tb_acc24`, `tb_spectro`, `tb_ddr_writer`, `tb_mem_clear`, `tb_rashpa`:
  data, addresses and timing, with and without back-pressure.
* `tb_diu_sequence`: whole frames through the pipeline into a byte-wide DDR
  model, for plain rotation (4 chips 12-bit, 8 chips 6-bit), 3-frame
  accumulation, 24-bit mode, spectroscopic mode, accumulation +
  spectroscopic, and 1-bit frames. Every stored pixel is compared.
* `tb_smartpix_backend`: the top at its default sizes, with stand-ins for
  the interconnect/DDR, the two CDMA engines and the host memory. Two
  acquisitions cover both pipelines and the RASHPA copy into host buffers.
  The dummy-pixel gaps are checked too. The test counts each mechanism
  (memory clear, writes held during the clear, link and DDR back-pressure,
  every angle, accumulation, 24-bit, spectroscopic, both CDMA engines, group
  pulses, RB wrap-around) and fails if one never occurred.

To run one with Verilator (about a minute to build, seconds to run):

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/smartpix_pkg.sv tb/frontend_model_pkg.sv rtl/dp_ram.sv \
  rtl/deinterleaver.sv rtl/rotation.sv rtl/acc24.sv rtl/spectro.sv \
  rtl/ddr_writer.sv rtl/diu_sequence.sv rtl/mem_clear.sv rtl/rashpa.sv \
  rtl/smartpix_backend.sv tb/tb_smartpix_backend.sv \
  --top-module tb_smartpix_backend -o sim
./obj_dir/sim
```

Other testbenches need only their module, `smartpix_pkg.sv` and `dp_ram.sv`.

## How far to trust it, and where it departs

The block structure, the data widths (256-bit link and rotation, 512-bit
after acc24), the RAM counts, the two-frame ping-pong, the one-image rotation
latency, the one-line spectroscopic latency, the DDR-writer parameters and the
RASHPA rule names come from the published design. Everything inside the
blocks was designed here, and checked only against the models in the
testbenches, not against the original hardware. In particular:

* Rotation is per chip only. The original also rotates a whole module or
  the global frame, which also moves chips to new positions. The DDR writer
  here places chip k at `start + k * block_stride`, in increasing order, so
  chips cannot be re-ordered.
* The control path to the front-end boards (the SMARTPIX controller) is not
  included. Configuration arrives as static input ports.
* The rotation sense, the order of output lines, the low/high counter order
  in 24-bit mode, the in-place spectroscopic layout and all RASHPA dispatch
  semantics are assumptions.
* The back-end clock frequency is not published, so whether the design meets
  the detector's 6000 frames/s at 22 Gbps depends on the clock reached. The 22 Gbps
  are split over two boards. At 11 Gbps and one 256-bit beat per cycle,
  each pipeline needs at least 43 MHz.
* Vendor blocks (Aurora, AXI interconnect, DDR4 controller, AXI CDMA, PCIe)
  are represented only by ports. The write port is a simplified one-beat AXI
  write, and the CDMA port carries source, destination and length.
