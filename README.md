# EVA²: an activation motion compensation unit for CNNs on live video

## The idea

Consecutive video frames are mostly the same scene, moved a little. A CNN
running on every frame therefore spends most of its work recomputing nearly the
same intermediate activations. EVA² sits beside a CNN accelerator and skips
that work on most frames:

* The network is split at a **target layer**, the last layer that still has 2-D
  spatial structure (for VGG-16 this is conv5_3).
* On a **key frame** the accelerator runs the whole network. EVA² keeps that
  frame's pixels and the target layer's activation.
* On a **predicted frame** EVA² estimates how the scene moved since the key
  frame. It then moves the stored activation by that motion and hands the
  result to the accelerator. The accelerator only runs the layers after the
  target layer.

This is **activation motion compensation** (AMC). Motion is estimated per
*receptive field*: each activation position looks at one window of input
pixels. Its motion vector is the key-frame offset at which that window matches
best.

EVA² decides per frame whether to predict. It sums the best-match errors of
all receptive fields. A large total means the prediction would be poor, so the
frame becomes a new key frame. A **memoization mode** reuses the stored
activation without moving it. This suits classification networks, which do not
care where the object is.

## Structure

```
            pix_in ─► pixel buffer A ◄─┐ key_sel swaps the roles
                      pixel buffer B ◄─┘ (input frame / key frame)
                            │
              diff tile producer ── tile differences ──► diff tile consumer
                                                           │ min error, motion vector per field
                                               key frame choice    motion vector memory
                                                      │                     │
  kact_in ─► sparse key activation buffer (4 banks) ─► warp engine ─► out_act (predicted)
                                                                  └─ out_pixels (key frame)
```

| File | Part |
|---|---|
| `rtl/eva2_pkg.sv` | Default sizes, the run-length entry type `rle_entry_t`, the motion vector `mv_t`, `frame_kind_e` |
| `rtl/pixel_buffer.sv` | One frame store |
| `rtl/diff_tile_producer.sv` | Tile-level block matching |
| `rtl/diff_tile_consumer.sv` | Receptive-field sums and minimum search |
| `rtl/key_frame_choice.sv` | Error total and key/predicted decision |
| `rtl/sparse_act_buffer.sv` | Run-length-encoded key activation store |
| `rtl/sparsity_decoder_lane.sv` | One of four RLE decoding lanes |
| `rtl/min_unit.sv` | Minimum of the four lanes' zero gaps |
| `rtl/weighting_unit.sv` | One weight × value product of the interpolator |
| `rtl/bilinear_interpolator.sv` | Four weighting units, adder tree, shift |
| `rtl/warp_engine.sv` | Per-position neighbour fetch, decoding, interpolation, RLE output |
| `rtl/eva2_top.sv` | The unit: buffers, role muxes, sequencing, accelerator interface |

All sizes are parameters. The defaults are the Faster16 configuration:

* 1000×562 frames, 8-bit pixels, 8 pixels per buffer word.
* 16-pixel tiles, so a 62×35 grid of activation positions.
* Search radius ±24 pixels at a search stride of 8, which gives 7×7 = 49 offsets.
* Receptive fields up to 12×12 tiles. The padding and field size are set at run time.
* 512 channels of 16-bit activations.
* 4 motion vector fraction bits.
* 4 activation banks of 55,552 entries each.

## Pixel buffers

Two identical frame stores, `pixel_buffer`. Each is an array of words of
`PIX_PER_WORD` pixels, with one write port and one read port. A read returns
its data one cycle after the address.

A register, `key_sel`, says which buffer holds the key frame. The other buffer
takes the incoming frame. When a frame is chosen as a key frame, `key_sel`
flips: the frame just written becomes the key frame, and the old key frame's
buffer takes the next input. The pixels of a key frame are then streamed out to
the accelerator from the buffer that now holds them.

## Motion estimation (RFBME)

Receptive fields are large compared with their stride. For VGG-16 conv5_3 a
field is 196 pixels wide and moves by 16. Neighbouring fields therefore share
most of their pixels. The design divides the frame into stride-sized **tiles**,
16×16 pixels each.

* Each tile is compared with the key frame once per search offset.
* A field's error is the sum of its tiles' errors at the same offset.
* Fields overlap the frame edge because of padding. Only their in-frame tiles
  count.
* Partial tiles are dropped: 196 px becomes 12 tiles and a 90 px padding
  becomes 6 tiles.

### Diff tile producer

For each tile, in raster order:

1. Load the tile from the input-frame buffer (`TILE·TILE/PIX_PER_WORD` words)
   into a local register file.
2. For each offset (dy outer, dx inner, steps of `SEARCH_STRIDE` from
   `-SEARCH_RADIUS` to `+SEARCH_RADIUS`), read the displaced tile from the key
   frame one word per cycle.
3. An adder tree sums the absolute differences of the word's pixels. An
   accumulator sums the words.
4. Emit one tile difference per offset, with the tile's coordinates and the
   offset index.

An offset that would read outside the key frame is not computed. It is still
emitted, with `td_inb = 0`, so the consumer always receives offsets in the same
order.

Timing per tile, with TW = TILE²/PIX_PER_WORD = 32 words:

* TW + 1 cycles to load the tile.
* TW + 3 cycles per in-bounds offset.
* 2 cycles per out-of-bounds offset.

At the default size the producer takes about 3.6 M cycles per frame.

### Diff tile consumer

The consumer stores each arriving tile difference in a **tile memory** that
holds the whole frame's tile differences (NTY × NTX × offsets). It then walks
the receptive fields in raster order and, for each field, every offset:

1. Read two columns of the tile memory: the column entering the window and
   the column leaving it. The field's rows are masked to its clipped height.
2. Two column adder trees sum the two columns.
3. The field error is `past + new column − old column`.
   * `past` is the same offset's sum for the field to the left, kept in the
     **past-sum memory**.
   * The first field of a row starts from zero, and its window grows one
     column at a time.
4. The new sum goes back into the past-sum memory.
5. The sum is compared with a **min-check register**:
   * An offset is a candidate only if the field's clipped window, moved by
     the offset, stays inside the key frame.
   * On a tie the earlier offset wins, except that the zero offset wins
     every tie, so a static scene reports zero motion.

At the end of a field, the consumer outputs the minimum error, the winning
offset as motion vector (in pixels), and the field's coordinates.

The window starts `rf_tiles − pad_tiles − 1` columns to the left of the first
field, so the walk covers `NTX + rf − pad − 1` column steps per row. The total
is NTY·(NTX + rf − pad − 1)·offsets + 2 cycles: 114,907 at the default size,
one field-offset per cycle. The consumer starts after the producer has
finished the frame.

### Key frame choice

`key_frame_choice` adds up the minimum errors of all fields of a frame. At the
end of the frame it compares the total with the `cfg_threshold` register.

* The frame is a key frame if total > threshold, or if `cfg_force_key` is set.
* The first frame after reset is always a key frame, because there is nothing
  to compare it with. The top skips motion estimation for it.
* The total is reported on `frame_err` with every decision.

## Key activation buffer

The target activation of the last key frame comes back from the accelerator as
a stream of run-length entries `{gap, value, last}`:

* `gap` is the number of zero channels before `value`.
* `last` marks the final entry of a position.
* A position with no non-zero channel is sent as one entry `{0, 0, last}`.

`sparse_act_buffer` writes the stream in raster order into four banks chosen
by `(x mod 2, y mod 2)`. Any 2×2 neighbourhood therefore has one position in
each bank and can be read in one cycle.

* Each bank has an entry memory, filled contiguously, and an index memory
  holding `{start, count}` per position.
* A position with no non-zero channel gets count 0, and its stand-in entry is
  not stored.
* If a bank fills up, later entries for it are dropped and a sticky
  `act_overflow` flag is set.
* The default capacity is 20% of the dense activation (62·35·512 values), in
  line with the at-least-80% reduction that run-length coding gives on
  Faster16.

## Warp engine

For each output position p, in raster order, the warp engine:

1. Reads p's motion vector (dx, dy) and forms the source point
   p + (dx, dy)/TILE in fixed point with `FRAC_BITS` fraction bits. In
   memoization mode the vector is taken as zero.
2. Splits the source point into its integer part (ix, iy) and its fractions
   (u, v).
3. Fetches the four neighbours (ix, iy), (ix+1, iy), (ix, iy+1) and
   (ix+1, iy+1) from the four banks. A bank crossbar is needed because the
   neighbour-to-bank mapping depends on the parity of (ix, iy).
4. Decodes them with four sparsity decoder lanes and interpolates bilinearly.

A lane whose neighbour is outside the activation map is switched off and
counts as zero.

### Sparsity decoder lanes and min unit

Each `sparsity_decoder_lane` has a small FIFO of entries, a zero-gap register
and a value register. Every step:

1. The `min_unit` takes the minimum of the four lanes' zero gaps and sends it
   to all lanes.
2. Lanes whose gap equals the minimum "hit": they give their value and pop
   their next entry.
3. The other lanes give zero and subtract min + 1 from their gap: the
   skipped zeros plus the channel just output.

Channels that are zero in all four neighbours are skipped without spending a
cycle. The cost of a position is therefore the number of channels that are
non-zero in at least one neighbour, not the channel count.

A lane that has used its last entry holds its gap at the channel maximum, so
it never wins the minimum. Entry fetch is credit based: a lane's fetcher
issues a read only while the FIFO has room for it and the reads already in
flight.

### Bilinear interpolator

`bilinear_interpolator` has two pipeline stages.

* Stage 1: four `weighting_unit`s each form one weight product,
  (1−u)(1−v), (1−u)v, u(1−v) or uv, and multiply it by their lane's
  activation.
* Stage 2: an adder tree sums the four products. The result is shifted right
  by 2·`FRAC_BITS` back to 16-bit fixed point.

Its result appears 2 cycles after its input. It is emitted as an RLE entry
with the gap counted since the previous output channel. A position whose four
neighbours are all zero emits the stand-in entry.

## Top level and accelerator interface

`eva2_top` sequences one frame at a time.

1. **Load:** `pix_in_valid/ready/data` stream one frame, word by word in
   raster order, into the input buffer.
2. **Motion estimation:** producer, then consumer. Each field's motion vector
   is written into the warp engine's vector memory. The errors go to key frame
   choice. This step is skipped for the first frame.
3. **Decision:** the result is reported on `frame_valid`, `frame_kind` and
   `frame_err`.
4. The rest depends on the decision:
   * **Key frame:** flip `key_sel` and stream the frame's pixels out on
     `out_pixels` with `out_is_act = 0`. Then accept the accelerator's target
     activation on `kact_valid/ready/entry` into the activation buffer.
   * **Predicted frame:** run the warp engine. Its entries go out on
     `out_act` with `out_is_act = 1`.
5. `frame_done` pulses and the next frame may be loaded.

Run-time configuration:

* `cfg_threshold`: the key frame threshold.
* `cfg_memoize`: memoization mode.
* `cfg_force_key`: make the current frame a key frame.
* `cfg_rf_tiles`, `cfg_pad_tiles`: the target layer's field size and padding,
  in tiles.

The output stream has no back-pressure. The accelerator must take one beat per
`out_valid`.

Measured cycle counts at the default size, from the full-size testbench with
15%-dense activations:

| Phase | Cycles |
|---|---|
| Load, per frame | ≈ 70,250 (one word per cycle) |
| Producer | 3,631,659 |
| Consumer | 114,907 |
| Warp engine | 534,560 |

A predicted frame takes about 4.35 M cycles in total, about 30 ms at a 7 ns
clock. Almost all of it is the producer, which reads one key-frame word per
cycle. A wider pixel-buffer port is the direct way to speed it up.

## Verification

Each part has a self-checking testbench in `tb/`:

* Unit testbenches run reduced sizes against reference models written from
  the algorithm. They check cycle counts where a latency is defined:
  producer timing, consumer timing, and the interpolator's 2-cycle latency.
* `tb/eva2_top_tb.sv` runs seven frames through a 64×48 build with 16
  channels and checks the frame kinds, error totals and every output beat.
  The frames cover: first key, half-tile shift, diagonal shift, key by error,
  memoization, forced key, and predicted after the forced key. It counts how
  often each mechanism occurs and fails if one never does:
  * role swaps
  * zero skipping
  * edge lanes
  * fractional interpolation
  * non-zero motion vectors
* `tb/eva2_top_full_tb.sv` runs the unit at its default parameters, with no
  overrides. It sends a key frame and a predicted frame moved by half a tile,
  and checks every output beat (about 590,000 checks) and the error total against the
  reference. It takes a few seconds.

### Running a testbench

Every testbench is self-checking and ends by printing
`TB_RESULT checks=N failures=M`. With Verilator 5, from the project root:

```
verilator --binary --timing --assert -y rtl -y tb rtl/eva2_pkg.sv \
          tb/eva2_top_full_tb.sv --top-module eva2_top_full_tb -Mdir obj
./obj/Veva2_top_full_tb
```

Replace the testbench name to run another one. The reduced-size testbenches
set the block's parameters with `#(...)`, so a size can be changed there.

## Workloads

| Network | At the default build |
|---|---|
| Faster16 (VGG-16 conv5_3, 1000×562) | Runs: the defaults are this configuration |
| FasterM (CNN-M conv5) | Runs with `cfg_rf_tiles` set to its field size; same 16-pixel stride and 512 channels |
| AlexNet (227×227, memoization) | Needs a build with `FRAME_W`/`FRAME_H` set to its input size. The frame size is fixed when the design is built |

FasterM's stride, field size and channel count, and AlexNet's input size, are
standard facts about those networks, not given in the paper.

## Where this design chose for itself

The published description names the parts and their function but leaves the
following open. Each is a choice of this design:

* The search radius and stride. Only their ratio 2R/stride = 6 follows from
  the published operation counts.
* Pixel depth and buffer word width.
* The run-length entry format, FIFO depth, bank layout and activation buffer
  capacity.
* The motion vector sign convention and the 4 fraction bits.
* The tie rule in the minimum search.
* The ">" threshold comparison, the force-key input, and the first-frame rule.
* Frame-at-a-time sequencing: the consumer waits for the producer, and
  nothing overlaps between frames.

Known differences from the published design:

* The "total motion magnitude" key frame policy is not built. Only the
  block-error policy is.
* The eDRAM macros are modelled as ordinary synchronous arrays.
* The host VPU's global buffer, the convolution accelerator (Eyeriss) and the
  fully-connected accelerator (EIE) are outside this design. They connect
  through the pixel/activation output stream and the key activation input
  stream of `eva2_top`.
* Activation buffer overflow drops entries and raises `act_overflow`. It does
  not stall the accelerator.
