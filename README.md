# Streaming readout with in-pixel encoding and zeromask edge compression for an X-ray pixel detector

A charge-integrating X-ray pixel detector with 256 × 256 pixels, read out at one
million frames per second, produces 256 × 256 × 14 bit × 1 MHz ≈ 917 Gbit/s: a
12-bit ADC sample plus 2 gain-range bits per pixel and frame. No practical set
of on-chip serial links carries that. This RTL reduces the data on the chip in
two lossless-in-practice steps before it reaches the transmitters:

1. **Inside every pixel**, the 14-bit sample is *denoised* (values below a
   per-pixel noise floor become 0) and *encoded* to 9 bits with steps no finer
   than the photon counting noise allows. That is a fixed 14 → 9 reduction
   (about 1.56×), whatever the image.
2. **At the edge of the array**, every strip of 16 pixel rows has a *streaming
   zeromask compressor*. It bit-shuffles each 16-pixel column slice, drops the
   all-zero bit planes, and packs the variable-length result into 256-bit
   blocks. In typical diffraction and photon-correlation images more than 80 %
   of the pixels are zero, and this stage gains a further 3.5× to 9×.

Everything is a stream. The array moves one pixel column to its edge every
clock, and each compressor accepts one column slice every clock. Nothing in
the data path can stall. The only place data can be lost is the elastic store
in front of each transmitter, and losses there are counted.

```
   pixel (r,c)                                   array edge, per 16-row strip
 +-----------------------------+     col      +------------------------------------------------+
 | ADC 12b + gain 2b            |   (9b x 16)  | bit      zeromask   coalescer    elastic       |
 | -> sample reg (frame_sync)   |  ---------->  | shuffle -> encoder -> (Selector + -> FIFO -> tx |
 | -> denoise -> encode (9b)    |  one column  | 16x9 ->  meta +      STBuf)       8 x 256b    |
 | -> 9b shift reg (row chain)  |  per clock   | 9x16     nonzero     256b blocks              |
 +-----------------------------+               +------------------------------------------------+
        x ROWS x COLS                                    x ROWS/16 strips
```

## Top level: `pixel_detector_asic`

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset, clears every register |
| `frame_sync` | in | 1 | one-clock pulse per frame: every pixel captures its sample |
| `adc[ROWS][COLS]` | in | 12 | per-pixel ADC result (the ADCs are outside this RTL) |
| `gain[ROWS][COLS]` | in | 2 | per-pixel gain range: 00 high, 01 medium, 10 low (11 is treated as low) |
| `cfg_shift`, `cfg_in[ROWS]` | in | 1, 12 | load the per-pixel noise floors, one shift chain per row |
| `tx_valid[g]`, `tx_ready[g]`, `tx_data[g]` | out/in/out | 1, 1, 256 | block stream of strip g towards its serializer (valid/ready) |
| `fifo_level[g]` | out | 4 | blocks waiting in strip g's elastic store |
| `fifo_overflow[g]`, `fifo_drops[g]` | out | 1, 16 | sticky loss flag and number of dropped blocks |
| `readout_overrun` | out | 1 | sticky: a frame sync came before the previous frame was read out |

Parameters (with defaults): `ROWS = 256`, `COLS = 256`, `N_PIX = 16` (rows per
compressor), `BUF_WORDS = 16` (16-bit words per output block, so 256 bits),
`FIFO_DEPTH = 8` blocks. `NG = ROWS / N_PIX` strips (16) and
`BLK_BITS = 256` are derived. Shared widths and types (`adc_t`, `enc_t`,
`gain_e`, `sample_t`, `region_e`) live in the package `xpd_pkg`. The
`pixel_array` module on its own defaults to 128 × 128 to keep a stand-alone
lint small; the top always sets its size to `ROWS` × `COLS`.

Strip g holds rows `16g … 16g+15`, and row `16g+i` is pixel i of that strip's
compressor. Word j of a block is `tx_data[g][16j+15:16j]`, and word 0 comes
first in the stream.

### Frame timing

* Edge t: `frame_sync` is high. Every pixel copies its ADC and gain inputs.
* Edge t+1: each pixel's shift register loads the denoised, encoded 9-bit value.
* Edges t+1 … t+COLS: the row chains shift one pixel per clock towards column
  `COLS-1`. So the edge sees column `COLS-1`, then `COLS-2`, and so on down to
  column 0. `readout_ctrl` marks exactly those COLS clocks with `col_valid`. It
  then pulses `frame_end` once.
* Frames must be at least `COLS + 1` clocks apart. With 256 columns and a
  1 MHz frame rate, that means a clock of at least 257 MHz. An earlier
  `frame_sync` restarts the readout, loses the rest of the old frame, and sets
  `readout_overrun`.
* The ADC and gain inputs only need to be valid on the `frame_sync` clock. The
  front-end can integrate the next frame while the previous one shifts out.
* The last block of a frame enters the FIFO `COLS + 4` clocks after
  `frame_sync`. It may wait there if the transmitter is busy.

## In-pixel encoding (`pixel_denoise`, `pixel_encoder`, `pixel_cell`)

**Denoising.** During calibration in darkness, the largest ADC value each pixel
shows is recorded and loaded as its noise floor. In the high-gain range, a
sample *strictly below* the floor is forced to 0. In the medium and low ranges
the comparison is not applied: even ADC code 0 there stands for tens of photons
or more. A floor of 0 turns denoising off for that pixel. Denoising is the one
lossy step. It discards sub-threshold charge, for example from photons whose
charge is shared between pixels.

**Encoding near the Poisson noise.** A photon count n carries an intrinsic
uncertainty of about √n. Resolving a large signal more finely than that wastes
bits. The three gain ranges are each cut at ADC = 1024 into six subregions. In
each subregion the ADC value is divided by a power of two and a power-of-two
offset is added:

| region | gain | ADC | code M | M range |
|---|---|---|---|---|
| 1 | high | 0–1023 | ADC/64 | 0–15 |
| 2 | high | 1024–4095 | ADC/256 + 16 | 20–31 |
| 3 | medium | 0–1023 | ADC/32 + 32 | 32–63 |
| 4 | medium | 1024–4095 | ADC/64 + 64 | 80–127 |
| 5 | low | 0–1023 | ADC/8 + 128 | 128–255 |
| 6 | low | 1024–4095 | ADC/16 + 256 | 320–511 |

Each offset is a power of two larger than the divided value it is added to. So
no adder is needed: the encoder selects a field of ADC bits and sets one
constant bit above it. The whole encoder is a six-way multiplexer of wired bit
fields, steered by the gain bits and `ADC[11:10]`. Codes increase with photon
count. The unused codes (16–19, 64–79, 256–319) are the price of the
power-of-two offsets. Region 1 keeps one code per photon, so single photons stay
visible.

**The pixel.** `pixel_cell` holds a sample register, the 12-bit noise-floor
register, and a 9-bit shift register. One clock after `frame_sync`, the shift
register loads the encoded sample. On every other clock it takes the value of
its neighbour further from the edge. The noise-floor registers form a second
chain per row (`cfg_in → cfg_out`) that advances on `cfg_shift`. After COLS
shifts, pixel (r, c) holds the value that was on `cfg_in[r]` at shift number
`COLS - c`. In other words, present the value for column `COLS-1-s` at step s.

## Edge compressor (`edge_compressor`)

This is the part worth reading closely. One instance serves one strip of 16
rows. Every clock it receives 16 pixels of 9 bits, one column slice.

### 1. Bit shuffle (`bit_shuffle`)

The 16 × 9 bit matrix is transposed into 9 words of 16 bits. Word j holds bit j
of every pixel, with pixel 0 in the most significant bit. This step is only
wiring. Why it helps: after denoising, most non-zero pixels are small. Their
high bit planes are then all zero across the 16 pixels, and the zeromask stage
drops them. A column whose only non-zero pixel has the value 3 becomes a
3-word fragment (metadata plus bit planes 0 and 1, 48 bits) instead of 144 bits.

### 2. Zeromask encoding (`zm_encoder`, `zm_packer`, `zm_shiftup`)

The 9 words of a column turn into one *fragment*:

* **Metadata word.** Bit `8-i` is 1 when word i is non-zero. Only the low
  9 bits of the 16-bit word are used.
* **Non-zero words.** These follow in their original order.

A fragment is 1 to 10 words long. An all-zero column costs one 16-bit word,
where it held 144 bits. A column in which every bit plane is non-zero costs
10 words, 11 % more than its raw size. That is the worst case, and it is bounded.

Packing is a chain of 9 identical `zm_shiftup` stages. Stage k sees the words
with positions 0…k-1 already packed below a pointer `pos`. If word k is non-zero,
the stage moves it to `pos` and increments `pos`. The final `pos` is the count
of non-zero words. The chain is combinational. One register at the encoder
output holds the fragment, its length, and the valid and frame-end flags.

### 3. Coalescing (`coalescer` = `coalesce_selector` + `coalesce_stbuf`)

Fragments vary in length, but the transmitter takes fixed 256-bit blocks
(16 words). The **Selector** keeps the fill position `pos` of a 16-word buffer:

* If `pos + len ≥ 16`, it raises `flushed`, and the new position is
  `pos + len − 16`.
* Otherwise the new position is `pos + len`.

The **STBuf** is a register array with a barrel shifter. It writes the fragment
at word positions `pos … pos+len−1` of the buffer, which is extended by 10
overflow words. On `flushed`, the first 16 words leave as a block, and the
overflow words move to the start of the buffer.

Fragments therefore pack back to back with no gaps. A fragment that does not
fit is **split**: its head completes the current block and its tail starts the
next one. A fragment is at most 10 words and a block is 16, so at most one
block leaves per clock. The stage can never need to stall.

**End of frame.** One clock after the last column, `frame_end` reaches the
Selector as a flush request. A partly filled buffer then leaves as a block,
padded with zero words. Every frame thus starts on a block boundary, and a
frame's data does not wait for the next frame.

### Decoding a strip's block stream

For each frame, concatenate that frame's blocks into a word stream. Then read
exactly COLS fragments:

1. Take a metadata word m.
2. For each i = 0…8 with bit `8-i` of m set, take the next word as bit plane i.
3. The remaining planes are zero.
4. Transpose the planes back: bit j of pixel p is bit `15-p` of plane j.

The fragments come out in column order `COLS-1` down to 0. Any words left over
in the last block are padding.

A zero padding word looks exactly like the fragment of an all-zero column.
That is why the decoder must count fragments and cannot just read to the end of
the data.

Per-column cost: 16 bits for an empty column, up to 160 bits for a full one. The
output port can take 256 bits per clock, so the compressor keeps up with the
array at any image content.

## Elastic store (`elastic_fifo`)

A compressor delivers a block on anywhere from about 6 % of the clocks (empty
frames) to 63 % (dense frames). A FIFO of `FIFO_DEPTH` 256-bit blocks absorbs
the peaks before the transmitter.

* The read side is first-word-fall-through with valid/ready.
* The array cannot be paused, so a block that arrives at a full FIFO is
  **dropped**. The sticky `fifo_overflow` flag is set and `fifo_drops` counts
  the loss, saturating at 65535.
* A write and a read on the same clock both happen, even when the FIFO is full.

Size the serializer rate and the depth so that overflow never happens for the
expected images. The flags are there to detect it, not to recover from it.

## What is included, what is not, and where this departs from the source design

**Not included.** These are outside the RTL, and their signals are ports:

* the charge-integrating analog front-end with automatic gain switching;
* the pixel ADCs;
* the multi-Gbit/s serial transmitters.

The look-up-table (SRAM) variant of the in-pixel encoder is not built, nor the
programmable-divider variant. The compressor is built only in its shuffled
16-pixel form. Its unshuffled 8-pixel form (one 9-bit metadata word per
8 pixels of 9 bits) is not provided. With `N_PIX = 8` the shuffled metadata
would not fit a word, and an elaboration check stops it.

**Choices made here that the source design leaves open:**

* the binary values of the gain code;
* denoising applied in the high-gain range only, with a strict `<`;
* a shift-chain interface for loading the noise floors;
* one clock between sample capture and chain load;
* the `col_valid`/`frame_end` framing and the overrun flag;
* splitting fragments across blocks;
* end-of-frame flushing with zero padding;
* the FIFO depth, its drop-on-full policy, and the valid/ready read side;
* the order of pixels within a strip, the strip-to-row mapping, and the bit
  order inside a block;
* synchronous, active-low reset everywhere.

The pipeline has one register stage at the encoder output and one at the block
output. The source design does not specify pipelining.

**Array orientation.** Here the pixel rows are the shift chains and a whole
column reaches the edge each clock. The compressors are placed along that
edge, one per 16 rows. The source design speaks both of a shift register
spanning a pixel column and of strips fed "column by column". These describe
the same picture transposed, and the strip view is the one followed here.

## Verification

Each module has a self-checking testbench in `tb/`. The expected values come
from the independent reference models in `tb/tb_ref_pkg.sv`, written with
integer division, loops, and queues rather than bit slicing. Every testbench
prints `TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| Testbench | What it covers |
|---|---|
| `tb_pixel_denoise` | boundary sweep around the floor, random samples |
| `tb_pixel_encoder` | all 16384 gain/ADC inputs, region limits, monotonicity |
| `tb_pixel_cell` | floor loading, capture, one-clock load latency, shifting |
| `tb_pixel_array` | 4 × 6 array, column order and timing at the edge |
| `tb_readout_ctrl` | exact `col_valid` window, `frame_end`, overrun |
| `tb_bit_shuffle` | the 8-pixel worked example, random 16 × 9 groups |
| `tb_zm_packer`, `tb_zm_encoder` | worked examples, random streams, one fragment per clock |
| `tb_coalescer` | random fragments with splits and flushes; each block on the clock after it fills |
| `tb_edge_compressor` | 60 frames of varying sparsity; last block ≤ 3 clocks after the last column |
| `tb_elastic_fifo` | 4-deep FIFO, random push/pop, full, empty, drops |
| `tb_pixel_detector_asic` | whole chip end to end, see below |

The end-to-end test runs a 32 × 16 array: two strips, FIFO depth 4.

* It loads random noise floors.
* It streams 60 frames of random gain/ADC data with varying sparsity, some at
  the minimum frame period.
* Every block on both `tx_data` outputs is compared with the reference chain:
  denoise → encode → shuffle → zeromask → blocks.
* It then forces FIFO overflow and a readout overrun.

It counts each mechanism and fails if any never occurred: denoising, all six
encoding regions, empty and full-length fragments, split fragments, padded
end-of-frame blocks, FIFO back-pressure, overflow, and overrun.

The largest configuration simulated end to end is this 32 × 16 array. The
full 256 × 256 top elaborates and lints, but a Verilator model of 65,536 pixel
cells with 65,536 × 14 input bits is too large to build and run in minutes.
The array, the readout controller and the compressors are all parameterised.
A strip behaves the same whatever the number of strips, and the per-strip
compressor is tested at its full default size.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/xpd_pkg.sv tb/tb_ref_pkg.sv tb/tb_pixel_detector_asic.sv \
    --top-module tb_pixel_detector_asic -o sim
./obj_dir/sim
```

Replace the testbench name to run another one. To try a fault, list a modified
copy of a module on the command line. A file named explicitly takes precedence
over the one found through `-y`.

## Sizes against the datasets the scheme was evaluated on

* The built chip is one 256 × 256 tile.
* The evaluation images are larger:
  * XPCS (Lambda 750K), 1556 × 512 pixels;
  * ptychography, cropped to 558 × 514;
  * high-energy diffraction, on a Pilatus 2M of about 1475 × 1679 pixels.

  A full detector tiles many such chips. Alternatively, `ROWS` and `COLS` can be
  raised, because the compressors see only a stream of columns.
* At 256 × 256 and 1 MHz:
  * the in-pixel encoding reduces 917 Gbit/s to 590 Gbit/s;
  * the edge compressors, at the worst-case ratios of 3.5× to 8.8× measured on
    those datasets, bring it to roughly 70–175 Gbit/s, that is 7 to 18
    10-Gbit/s links.
