# On-chip compression for a MHz-frame-rate X-ray pixel detector

A hybrid pixel detector for coherent diffraction imaging (ptychography) that
runs near 1 MHz frame rate produces more raw data than a handful of serial
links can carry: 64 x 64 pixels of 10 bits at 1 MHz is already 41 Gbit/s. Most
pixels in such data see zero or a few photons, so the data compress well if
the compression runs at the edge of the pixel matrix (the "balcony"), at full
pixel rate, without ever stalling the readout.

This RTL implements that balcony logic. Its main ideas:

* **Physics-aware lossy preprocessing.** Photon counts carry Poisson noise
  of about sqrt(N). Sending round(sqrt(N)) or floor(sqrt(N)) instead of N
  loses little information but removes bits. Background subtraction, cropping
  and 2 x 2 binning are also available. Every option can be switched on or off.
* **Cheap lossless compression.** Sixteen pixels are bit-shuffled into ten
  16-bit "bit planes". Only the planes up to the highest non-zero one are
  kept. The count of kept planes (the bit-width) goes out as metadata.
* **Coalescing.** The variable-length outputs of the parallel compressors are
  merged into one contiguous list and packed into fixed 1024-bit words. This
  spreads the data evenly over all serial links, whichever region of the
  image is bright.
* **An elastic readout.** A wide dual-clock FIFO absorbs bursts. An
  Aurora-style 64B/66B link layer spreads each 1024-bit word over 16 bonded
  lanes and sends IDLE when there is nothing to send.

The default build is a 64 x 64 array of 10-bit pixels. It takes 64 pixels per
clock through 4 compressors, packs 1024-bit words into a 16-word FIFO, and
drives 16 lanes of 32-bit serializer words.

## Data path

```
 pixel_counts ─► pixel_array_readout ─► preprocess ───────────────► dbw_compressor x4
 (64x64x10)      64 row shift regs      crop ► background ► 2x2 bin   bit shuffle + bit-width
                 1 column / clock       ► sqrt / cube root            (rows 16c..16c+15)
                                                                         │ bw[4], planes[4][10]
                                                                         ▼
  ser_word[16] ◄─ link_layer ◄──── async_fifo ◄──── coalesce_packing ◄─ coalesce_reduction
  (16 x 32 bit)   IDLE/CB/OVF,     16 x 1024 bit    buffer → 1024-bit    metadata word +
                  scramble,        core → link       words, frame-end     planes, contiguous
                  gearbox          clock             flush
```

`detector_top` wires the whole chain together. The left of the FIFO runs on
the core clock `clk`, the right on `link_clk`. Everything in front of the
packing buffer is combinational, except the pixel shift registers and the
binning register. The parts that are not logic stay outside the RTL. The pixel
sensor and counters deliver the frame on `pixel_counts`. The PLL delivers
`link_clk`. The serializers and line drivers receive `ser_word`.

## Frame timing

`frame_load` copies a frame of counts into 64 row shift registers. From the
next clock on, one column of 64 pixels leaves per clock, with `sof` on column
0 and `eof` on column 63. A frame therefore takes 64 core clocks, and 1 MHz
frames need a 64 MHz core clock. A load that coincides with the `eof` cycle
gives back-to-back frames with no gap. No stage can stall, so nothing slows
the readout.

## Preprocessing

The options are applied in this order. All are set by the `cfg` struct
(`detector_pkg::pp_cfg_t`), which must stay constant while a frame is in the
pipeline.

| option | field(s) | what it does |
|---|---|---|
| crop | `crop_en`, `crop_col_lo/hi`, `crop_row_lo/hi` | columns outside the window are dropped; rows outside it are set to 0 |
| background | `bg_en`, `bg_level` | `max(N - bg_level, 0)` on every pixel |
| binning | `bin_en` | 2 x 2 sums, saturated at 1023 |
| quantiser | `quant` | `Q_NONE`, `Q_SQRT_FLOOR`, `Q_SQRT_ROUND`, `Q_CUBE_ROOT` |

**Square root.** `poisson_sqrt` is an unrolled digit-by-digit square root.
It keeps a remainder D = N - R² and a helper C = 2ⁿ·R. For each result bit n,
from the top down, it sets the bit when D >= C + 4ⁿ. It then updates
D -= C + 4ⁿ and C = C/2 + 4ⁿ; otherwise it only halves C. After the last bit,
C is floor(sqrt(N)). Rounding adds one when the remainder is larger than the
root, which is the same as asking whether the first binary digit after the
point is 1. The circuit uses no multipliers. There is one instance per pixel
lane (64), and the output is 6 bits, since round(sqrt(1023)) = 32. The
encoded root R goes on the link; the receiver restores the count as R².

**Binning.** Rows 2j and 2j+1 are added in each column, and pairs of kept
columns are added. Two binned columns of 32 pixels are then sent as one
64-pixel vector: `out[j]` belongs to the first binned column, `out[32+j]` to
the second. So one vector leaves for every four kept columns. At `eof` an
incomplete group is sent with its missing columns taken as zero.

## Compression: bit planes and bit-width

Each `dbw_compressor` takes 16 pixels: rows 16c to 16c+15 of the current
vector. It outputs ten planes, `plane[k][i] = pixel[i][k]`, plus `bw`. `bw` is
the number of the lowest planes that are not all zero (10 minus the count of
leading zero planes). Planes at `bw` and above are zero by construction and
are never sent. Choosing the regions is a wiring decision. Square 4 x 4
regions would need four columns buffered before compression. This design uses
16 x 1 regions of one column instead.

## The compressed stream

This is the part a receiver has to get right. Each vector (one column, or one
binned group) becomes this list of 16-bit words:

```
word 0                      metadata: bw of compressor c in bits [4c+3:4c]
words 1 .. bw0              planes 0 .. bw0-1 of compressor 0 (rows 0..15)
next bw1 words              planes of compressor 1 (rows 16..31)
...                         compressor 3
```

A vector is therefore 1 to 41 words long. An all-zero column costs one word;
an incompressible one costs 41 words (656 bits instead of 640). In plane k,
bit i is bit k of pixel i of that region.

`coalesce_reduction` builds this list with a tree of `coalesce_merger` nodes.
Each node appends one list directly behind another with a shift and an OR:
compressors 0+1 and 2+3 first, then the two pairs, and finally the metadata
word in front. `coalesce_packing` keeps a buffer of up to 63 words. Each clock
it appends the new list. When 64 words (1024 bits) are present, it writes the
lowest 64 to the FIFO and keeps the rest. At most 41 words arrive per clock,
so at most one FIFO word leaves per clock and the stage never has to stall.

Within a FIFO word, stream word w sits in bits [16w+15:16w]. The words of one
frame follow each other across FIFO words, regardless of FIFO word
boundaries.

**Frame end.** On the last vector of a frame, the packer sends what is left
as one more FIFO word, padded with zeros. If that clock also filled a whole
word, the padded word follows one clock later. Every frame therefore starts
on a fresh 1024-bit word. A decoder reads the known number of vectors for the
frame: 64 columns minus any cropped ones, or one quarter of that, rounded up,
with binning. It then skips to the next word boundary. `decode_vec` in
`tb/tb_ref_pkg.sv` is a complete decoder.

## FIFO and overflow

`async_fifo` is a 16 x 1024-bit dual-clock FIFO with flip-flop storage. Its
pointers cross between the clocks in Gray code through two-flop
synchronizers. Reads are first-word-fall-through. The compressor side cannot
wait, so a word that arrives while the FIFO is full is dropped. The drop
pulses `fifo_overflow` and toggles a signal that the link layer turns into an
overflow message block. After an overflow, the frames in flight are
corrupted; a receiver should resume at the next frame it can identify. The
FIFO is there to absorb bursts. An incompressible frame is 41 FIFO words, so
the link must on average keep up with the compressed rate.

## Link layer

Each 1024-bit FIFO word fills all 16 lanes once: lane i sends bits
[64i+63:64i] as one 64B/66B data block. All lanes run in lockstep, so every
block slot carries the same kind of block on every lane, in this priority:

1. channel-bonding block: one per `cb_req` pulse;
2. FIFO-overflow message: a user K-block, type 0xD2, message byte 0x01;
3. IDLE (type 0x78): while `idle_req` is high or the FIFO is empty;
4. data.

Payloads go through the self-synchronous scrambler 1 + x³⁹ + x⁵⁸. The 2-bit
sync header is not scrambled: "01" for data, "10" for control, first bit
first. Each lane's `gearbox_66_32` cuts the 66-bit blocks into 32-bit words,
bit 0 first. It takes a block every other clock, plus one pause every 32
blocks, so 32 blocks fill 66 words. No flow control comes back from the
receiver.

The control block layouts use the Aurora 64B/66B conventions as commonly
documented: the block type byte first, and channel bonding flagged by payload
bit 8 of an idle block. They are not taken from a protocol document. Check
them against the Aurora 64B/66B specification before connecting a commercial
Aurora core. They are defined in one place, `detector_pkg`.

## Compression on synthetic diffraction frames

`tb_compression_ratio` sends synthetic frames through `detector_top`. Each
frame is a Gaussian beam with photon noise, plus 0.05 photons of background
per pixel. Every frame goes through once losslessly and once with each square
root. The testbench checks the stream length against the reference model and
prints the ratio: 40960 raw bits divided by the stream bits, not counting the
padding at frame end.

| max count | beam sigma | lossless | + sqrt round | + sqrt floor |
|---|---|---|---|---|
| 15   | 3 px | 8.6x | 9.9x | 10.1x |
| 15   | 8 px | 4.9x | 6.6x | 7.4x |
| 63   | 3 px | 7.3x | 9.1x | 9.3x |
| 63   | 8 px | 3.3x | 4.9x | 5.3x |
| 255  | 3 px | 6.1x | 8.2x | 8.3x |
| 255  | 8 px | 2.3x | 3.8x | 4.0x |
| 1023 | 3 px | 5.0x | 7.1x | 7.2x |
| 1023 | 8 px | 1.7x | 3.0x | 3.0x |

The table shows the expected behaviour:

* the ratio falls as the counts and the bright area grow;
* the square root improves the ratio of every frame;
* the floor variant compresses slightly better than rounding.

Here the square root adds 1.3 to 2.5 to the ratio. Published results on
rescaled and resized real frames show an addition of about 3 on average, and
lossless ratios from 1.2x to 40x. Real frames differ in shape from these
synthetic ones, so treat this table as a check of the trend, not as a
prediction.

## Where this design fills gaps

The published description of this architecture gives the following:

* the chain of blocks;
* the square-root algorithm;
* the bit-plane compressor and the reduction/packing structure;
* the 64 x 64 x 10-bit geometry, 64 pixels per clock and 1024-bit words;
* the 16-word register FIFO;
* the 16-lane link layer: a FIFO reader, 16 scramblers, 16 gearboxes, 32-bit
  serializers, and IDLE and channel-bonding insertion.

The following are this design's own choices:

* 16 x 1 compressor regions instead of 4 x 4, and the plane order in the stream;
* the metadata layout;
* the frame-end flush;
* how crop and binning work, and the order of the preprocessing options;
* a single global background level;
* the cube root rounded down (the cube root is only named, not described);
* drop-on-full overflow handling;
* the FIFO pointer scheme and the gearbox structure;
* the control-block code points;
* the `cfg` port in place of a register interface.

Not implemented:

* clock compensation sequences on the link, which an Aurora receiver expects
  when the two ends run from separate reference clocks;
* several shift buses per row to speed up readout;
* the analogue front end, serializers, line drivers and PLL. These are not
  logic and sit outside the RTL.

## Files

| file | content |
|---|---|
| `rtl/detector_pkg.sv` | sizes, `pp_cfg_t`, quantiser enum, link code points |
| `rtl/detector_top.sv` | whole balcony |
| `rtl/pixel_array_readout.sv` | row shift registers |
| `rtl/preprocess.sv`, `pp_crop.sv`, `pp_background.sv`, `pp_binning.sv`, `poisson_sqrt.sv`, `cube_root.sv` | preprocessing |
| `rtl/dbw_compressor.sv` | bit shuffle + bit-width |
| `rtl/coalesce_merger.sv`, `coalesce_reduction.sv`, `coalesce_packing.sv` | coalescing |
| `rtl/async_fifo.sv` | FIFO |
| `rtl/link_layer.sv`, `scrambler_64b66b.sv`, `gearbox_66_32.sv` | link layer |
| `tb/tb_<module>.sv` | self-checking testbench per module |
| `tb/tb_detector_top.sv` | end-to-end test at full size |
| `tb/tb_compression_ratio.sv` | compression-ratio workload on synthetic frames |
| `tb/tb_ref_pkg.sv`, `tb/tb_lane_rx.sv` | reference models: preprocessing, stream decoder, lane receiver |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops by itself. A
watchdog ends a testbench that hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/detector_pkg.sv tb/tb_ref_pkg.sv tb/tb_detector_top.sv \
    --top-module tb_detector_top -o sim
./obj_dir/sim
```

Replace the testbench name to run another one. `tb_ref_pkg.sv` is needed only
by `tb_preprocess`, `tb_detector_top` and `tb_compression_ratio`, but it does
no harm elsewhere. `tb_compression_ratio` prints the compression table shown
earlier.

`tb_detector_top` runs the design at its default size. It sends 14 frames
that cover every preprocessing option, back-to-back frames, all-zero and
incompressible regions, and a channel-bonding request. It decodes the lanes
back to pixels and compares every pixel with the reference model. It then
holds the link idle, so that the FIFO fills and overflows, and checks that the
overflow message arrives. It takes well under a minute.

What the tests cover:

* every unit is checked against independent models;
* the square root and cube root exhaustively;
* the FIFO with unrelated clocks;
* the gearbox and link throughput (32 blocks per 66 clocks);
* the scrambler against a bit-serial model and a self-synchronising descrambler.

What they do not cover:

* interoperation with a real Aurora receiver;
* timing closure at any clock rate;
* any analog part.

## Changing the size

The geometry is set in `detector_pkg`: `NROWS`, `NCOLS`, `PIX_W`, `REGION`,
`FIFO_W`, `FIFO_DEPTH` and `NLANES`. The blocks take these as parameters.
They must satisfy the following:

* the number of compressors, `NROWS/REGION`, is a power of two;
* the metadata, 4 bits per compressor, fits in one word of `REGION` bits;
* `1 + NCOMP*PIX_W` is smaller than `FIFO_W/REGION`, which keeps packing
  stall-free;
* `NLANES*64 == FIFO_W`.

Assertions check these conditions at elaboration.
