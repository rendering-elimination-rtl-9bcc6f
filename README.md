# Rendering Elimination: skipping unchanged tiles before rasterisation

In an animated scene, most screen tiles often look the same in two consecutive frames. A
tile-based GPU still rasterises, shades, blends and writes back every one of them. Rendering
Elimination (RE) detects early that a tile will look the same, before its first primitive is
rasterised. The colours of a tile depend only on its inputs: the vertex attributes of the
primitives that overlap it and the scene constants of their drawcalls. If those inputs are
bit-for-bit the same as in the previous frame, so are the colours. The tile can then skip the
whole Raster Pipeline, and the Frame Buffer keeps last frame's pixels.

A whole frame of tile inputs is far too large to keep on chip, so each tile's inputs are
reduced to a 32-bit CRC signature. The difficulty is that primitives arrive in drawcall order,
not tile order: a tile's input message is only complete once the whole frame's geometry has
been sorted. The hardware therefore builds every tile's CRC incrementally, folding in one
primitive at a time, while the geometry is being binned. When the Raster Pipeline starts, a
tile's check costs one buffer read and one 32-bit compare.

This repository holds synthesizable SystemVerilog for that hardware: the Signature Unit, its CRC
datapath, the Signature Buffer, and the check in front of the Raster Pipeline. The rest of the
GPU (command processor, vertex stages, polygon list builder, rasteriser, shaders, caches, memory)
is a conventional tile-based design. It is not included; its connections are ports of the top
module `rendering_elimination`.

## Where it sits in the GPU

```
 Command Processor --constants (64-bit subblocks)-------------+
                                                               v
 Polygon List Builder --primitive attributes (64-bit)--> Signature Unit <--> Signature Buffer
                      --ids of overlapped tiles------->  (OT queue)          (2 x 3600 x 32 bit)
                                                                                  |
 geometry done -----------------------------------------> tile check <------------+
                                                              |        \
                                                 tile to Raster Pipeline  tile eliminated
```

A frame goes through two phases:

1. **Geometry.** The command processor issues scene constants. The polygon list builder emits
   each primitive's attributes and the list of tiles the primitive covers. The Signature Unit
   extends the signature of every covered tile.
2. **Raster.** Tiles are visited in index order. A tile whose signature equals last frame's is
   eliminated; any other tile is passed to the Raster Pipeline.

## What a tile's signature covers

A tile's input message is the concatenation, drawcall by drawcall, of:

- the drawcall's constants, once;
- then the attributes of each of that drawcall's primitives that overlap the tile, in
  submission order.

Drawcalls whose primitives miss the tile contribute nothing.

Example with four tiles. Drawcall F has constants F and one primitive C covering tiles 0 and 2.
Drawcall S has constants S and primitives A (tiles 1, 2, 3) and B (tiles 1, 3). The messages are:

| tile | message |
|------|---------|
| 0 | F, C |
| 1 | S, A, B |
| 2 | F, C, S, A |
| 3 | S, A, B |

Shader programs and textures are not part of the signature. Changes to them are rare and are
known to the driver, which clears `re_enable` for such a frame: every tile is then rendered,
while signatures are still built for the next frame.

## The CRC arithmetic

This is the part that needs the most care.

**The CRC.** Signatures are CRC-32 with generator G = 0x04C11DB7, processed most significant bit
first, with initial value 0 and no final inversion. Read as a polynomial over GF(2), a message M
has CRC(M) = M·x³² mod G. The zero start value and the missing final XOR keep the CRC linear.
Every identity below depends on that. Using a CRC variant with a non-zero initial value or a
final inversion would break the design.

**Concatenation.** For a message M followed by a piece P that is n 64-bit subblocks long:

    CRC(M · P) = CRC(M)·x^(64n) mod G  XOR  CRC(P)

The first term is "the old CRC, pushed past n subblocks of zeros". Equivalently, it is the CRC of
M followed by 64·n zero bits. The hardware therefore needs two operations:

- **Sign:** the CRC of one 64-bit subblock.
- **Shift:** C·x⁶⁴ mod G for a 32-bit value C. This is the CRC of the 64-bit message made of C
  followed by 32 zero bits.

Both are done with tables of 256 × 32 bits (1 KB each). The entry for byte b in a table with
"z trailing zero bytes" is the CRC of b followed by z zero bytes (`crc_lut`). The contents are
computed at elaboration from the polynomial, so no table data ships with the RTL.

| unit | tables | input byte → table |
|------|--------|--------------------|
| `sign_subunit` | 8 (LUT_7 … LUT_0) | subblock bits 63:56 (first byte) → 7 zero bytes … bits 7:0 → 0 |
| `shift_subunit` | 4 (LUT_11 … LUT_8) | C[31:24] → 7 zero bytes … C[7:0] → 4 zero bytes |

The outputs of a unit's tables are XORed together. The Shift tables hold the same contents as
LUT_7 … LUT_4, but they are separate physical tables because both subunits are read in the same
cycle.

Be careful with "CRC of C followed by 64 zero bits" (C·x⁹⁶): it is a plausible reading of the
Shift step, but it is wrong by a factor of x³². One of the stored fault variants makes exactly
that mistake, and the testbenches catch it.

**Compute CRC unit** (`compute_crc_unit`): `CRC_Out ← Sign(Aᵢ) ⊕ Shift(CRC_Out)`, one subblock per
clock, starting from 0. A counter tracks the block length n (the *shift amount*). A constants
block of 16 four-byte values is 8 subblocks and takes 8 cycles. A primitive with three 48-byte
attributes is 18 subblocks and takes 18 cycles.

**Accumulate CRC unit** (`accumulate_crc_unit`): loads a tile's partial CRC, then applies
`Shift` n times, one per clock. The result is CRC(M)·x^(64n). Latency: n + 1 cycles.

## The Signature Unit

`signature_unit` holds four registers, named as in the original description:

- **Constants CRC** and **Shift Amount C**: the current drawcall's constants.
- **Primitive CRC** and **Shift Amount P**: the current primitive.

A primitive is processed as follows:

1. The attribute subblocks stream into the Compute CRC unit. At the same time the polygon list
   builder pushes the covered tile ids into the **OT (overlapped tiles) queue**, 16 entries
   deep. Each entry carries a flag that marks the primitive's last tile.
2. When the last subblock has been signed, CRC_Out and the count move into Primitive CRC and
   Shift Amount P, as soon as these registers are free.
3. For each tile popped from the OT queue:
   - read the partial signature S from the Signature Buffer;
   - test-and-set the tile's bit in the **constant bitmap**;
   - if the bit was clear (first primitive of this drawcall on this tile):
     `S ← Acc(S, SAC) ⊕ ConstCRC`;
   - `S ← Acc(S, SAP) ⊕ PrimCRC`;
   - write S back.

While step 3 runs for one primitive, the Compute CRC unit already signs the next one. If a
primitive covers more tiles than the OT queue holds, `ot_ready` falls and the polygon list builder
stalls. Apart from a new constants set waiting for the last tile updates of the previous
drawcall, this is the only way RE slows down the geometry phase.

A tile update costs n + 3 cycles, where n is the primitive's length in subblocks. The first visit
of a drawcall to a tile adds m + 1 cycles, where m is the constants length.

The bitmap (one bit per tile) ensures that a drawcall's constants enter a tile only once. It is
cleared when a new constants set begins and at every `frame_start`. Constants blocks that follow
each other with no primitive in between form one set: the later block is appended to Constants
CRC through the otherwise idle Accumulate unit, and Shift Amount C grows.

**Ordering rule for the producer.** A constants block is accepted only after every earlier
primitive has been fully folded in. The block must be presented after the previous drawcall's
last primitive and before its own drawcall's first primitive. If both inputs are valid at the
same time, constants win.

## Signature Buffer and the tile check

`signature_buffer` holds one 32-bit signature per tile in two banks: the frame being built and
the previous one. `frame_start` swaps the banks and invalidates the new current bank through one
valid bit per entry. A tile that nothing has touched yet in the frame therefore reads as 0, the
CRC start value, without a 3600-cycle clear. All reads are synchronous.

`re_tile_scheduler` starts once geometry is done and the Signature Unit has drained. It walks
tiles 0 … NUM_TILES-1. A tile is eliminated when all three hold:

- `re_enable` was set for the frame;
- a previous frame exists (never true for the first frame after reset);
- the current and previous signatures are equal.

An eliminated tile takes 2 cycles and is reported on `skip_valid`/`skip_tile`. A rendered tile
is offered on `disp_valid`/`disp_tile` until `disp_ready`. Fetching the tile's primitives from the
parameter buffer stays with the GPU's own tile scheduler.

## Top-level interface (`rendering_elimination`)

| port | dir | meaning |
|------|-----|---------|
| `frame_start` | in | pulse before a frame's geometry; must follow the previous `frame_done` |
| `cp_valid/ready`, `cp_data` | in/out | constants subblocks, `subblock_t` = {64-bit data, last} |
| `plb_valid/ready`, `plb_data` | in/out | primitive attribute subblocks, same format |
| `ot_valid/ready`, `ot_tile`, `ot_last` | in/out | ids of the tiles the current primitive overlaps, last flag on the final one |
| `geom_done` | in | pulse after the frame's last primitive has been handed over |
| `re_enable` | in | sampled when the tile walk starts; 0 renders every tile |
| `disp_valid/ready`, `disp_tile` | out/in | tiles to render |
| `skip_valid`, `skip_tile` | out | tiles eliminated |
| `frame_done` | out | pulse after the last tile of the frame |
| `ot_full` | out | OT queue full (geometry stall) |

All valid/ready transfers happen on a rising clock edge where both are high. The reset `rst_n`
is asynchronous and active low.

Parameters and their defaults: `NUM_TILES = 3600` (a 1196×768 screen in 16×16 tiles, 75 × 48),
`OTQ_DEPTH = 16`, `SHAMT_W = 16` (blocks up to 65 535 subblocks), and `TILE_ID_W` derived from
`NUM_TILES`. Screen and tile sizes are in `re_pkg`.

Storage at the defaults:

| structure | size |
|-----------|------|
| Signature Buffer | 2 × 3600 × 32 bit (28.8 KB) plus 7200 valid bits |
| constant bitmap | 3600 bits |
| CRC tables | 12 × 1 KB (8 Sign, 4 Shift), plus 4 more in the Accumulate unit's own Shift subunit |

## Choices made here, and known departures

- The polynomial, bit order and byte order are choices of this design. The description only
  says "CRC32". A zero initial value and no final XOR are required, as explained above.
- The Shift step is the CRC of {C, 32 zero bits}, and the four Shift tables are read as
  LUT_11 … LUT_8 naming the tables that follow LUT_0 … LUT_7.
- The OT queue depth (16) and the last-tile flag are choices.
- A tile's second update step (primitive after constants) loads the Accumulate unit with the
  result of the first step.
- Geometry and raster phases of successive frames do not overlap.
- The check compares with the *previous* frame. With a double-buffered frame buffer, a skipped
  tile must already hold the right pixels in the back buffer it is about to be shown from. That
  is the frame two back, so a system with two frame buffers needs a third signature bank, or
  comparisons against the frame two back. This is not built.
- A tile touched by no primitive in both frames has signature 0 both times and is eliminated.
  That is right only if the clear colour did not change. The driver should clear `re_enable`
  when it does.
- CRC collisions are possible in principle: about one chance in 2³² per tile that a changed
  tile is wrongly reused.

## Verification

Every module has a self-checking testbench in `tb/` that ends with a `TB_RESULT checks=… failures=…`
line. Expected values come from `re_tb_pkg`: a plain bit-serial CRC shift register that extends a
message by simply running on. It never uses tables or the XOR identity the design relies on.

| testbench | checks |
|-----------|--------|
| `crc_lut_tb` | all 256 entries of three tables |
| `sign_subunit_tb`, `shift_subunit_tb` | every single-bit input and 2000 random inputs |
| `compute_crc_unit_tb` | blocks of 1–40 subblocks; CRC, shift amount, and 8- and 18-cycle timing |
| `accumulate_crc_unit_tb` | shifts 0–40; result and n + 1 latency |
| `ot_queue_tb` | fill to full, refusal while full, FIFO order under random traffic |
| `constant_bitmap_tb`, `signature_buffer_tb` | random operations against models |
| `re_tile_scheduler_tb` | decisions and order; RE off; first frame; 2 cycles per eliminated tile |
| `signature_unit_tb` | the four-tile example above plus random drawcalls, a 4-entry OT queue (forces stalls), and a constants set split into two blocks |
| `rendering_elimination_tb` | whole design at the default 3600 tiles over five frames, below |

The five frames of `rendering_elimination_tb`:

1. first frame: everything rendered;
2. identical frame: everything eliminated;
3. one primitive and one drawcall's constants changed: only their tiles rendered;
4. RE disabled: everything rendered;
5. identical again: everything eliminated.

It also counts OT-queue stalls, the signing of a primitive while tiles are being updated, bitmap
hits and split constants sets, and fails if any of them never happens.

`re_workload_tb` stands in for the games the technique is meant for. It cannot replay them, so it
builds a scene that changes the way each kind of game does. The background is 30 quads covering
the screen, and their attributes depend on the camera position. On top are four small sprites,
one of which moves every frame. Three phases run back to back, 4 frames each:

| phase | what changes | eliminated |
|-------|--------------|------------|
| static camera (puzzle and strategy games) | the moving sprite | 3592 of 3600 tiles per frame |
| moving camera (a first-person shooter) | every background attribute | none |
| mixed (games that alternate) | the camera on every other frame | half of the frames at 3592 |

Every tile's decision is checked against the bit-serial reference, as are the per-phase shares.
How many tiles a real game leaves unchanged is a property of the game, not of this hardware.

To simulate with Verilator 5 (here the top-level test). Verilator finds each module in the
file of the same name, so only the two packages and the testbench are listed:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  --top-module rendering_elimination_tb \
  rtl/re_pkg.sv tb/re_tb_pkg.sv tb/rendering_elimination_tb.sv
./obj_dir/Vrendering_elimination_tb
```

For another testbench, change the `--top-module` and the last file. The top-level test runs in
well under a minute. To try another screen size, change `SCREEN_W`, `SCREEN_H` or `TILE_PIX` in
`re_pkg`: the testbenches follow it.
