# Multi-focus image fusion in the DCT domain (DCT+Amp_max) — SystemVerilog RTL

A camera lens keeps only one depth plane sharp. Given two pictures of the same
scene focused at different depths, this circuit builds one picture that is
sharp everywhere. It works on 8x8 blocks, as JPEG does. Both images are
transformed with an 8x8 DCT. For each block position, the block whose AC
coefficients have the larger total magnitude is taken as the sharper one. A 3x3
majority vote over the block decisions removes isolated wrong choices
("consistency verification"). The coefficients of the winning block are then
passed on. Apart from the transforms, the contrast measure costs only
additions: no multiplications, variances or divisions. That is the point of
the method.

The fused coefficients leave the design ready for a JPEG quantiser and entropy
coder, which is not part of this RTL. They are also converted back to pixels
by an inverse DCT.

The architecture follows a published VLSI design for this method, called
DCT+Amp_max (Mishra, Mahapatra and Banerjee). That description gives the block
diagram, the 35-bit number format, the ping-pong transpose structure of the 2-D
DCT, and the adder structures of the decision block and the majority filter.
Everything else here is this implementation's own choice and is flagged as
such below: memory capacity, host interface, pipelining, border handling and
FIFO depth.

## Data flow

```
 host ──► image_mem A ──┐                  ┌──► coef_fifo A ──┐
 (8 px/clk)             ├► block_reader     │                  ├─► data_select ─► coef_* (fused DCT)
 host ──► image_mem B ──┘   (8 px/clk)      │                  │        │
                     dct2d A ───────────────┼──► decision_block│        └──► idct2d ─► pix_* (fused pixels)
                     dct2d B ───────────────┼──►      │        │
                                            └──► coef_fifo B ──┘
                                          majority_filter ◄──┘ (decision per block)
```

- **image_mem** (one per image): eight single-port memories. Bank *i* holds the
  pixel columns *x* with *x* mod 8 = *i*, so one address gives the eight pixels
  of one row of one block. The image is stored as raster-order 8-pixel words,
  at address `y*(W/8) + x/8`. The default capacity is one 3840x2160 frame.
- **block_reader** reads both memories in lockstep, block by block in raster
  order of blocks, with one 8-pixel row per clock. A frame of *B* blocks takes
  exactly 8·*B* clocks.
- **dct2d** (two, in lockstep): a 1-D DCT on each row, then a pair of transpose
  memories, then a 1-D DCT on each column. Pixels are level-shifted by −128
  first, as in JPEG.
- **decision_block** adds the magnitudes of the 63 AC coefficients of each
  block of A and of B. It outputs 1 (take A) when C_A > C_B, otherwise 0.
- **majority_filter** replaces each block's decision by the majority of its 3x3
  neighbourhood of decisions.
- **coef_fifo** (one per image) holds the coefficients until the block's final
  decision is known.
- **data_select** pops the block's eight coefficient columns from both FIFOs
  and forwards those of the chosen image.
- **idct2d** is the same 2-D structure with the transposed constant matrix. It
  is followed by rounding, +128 and clamping to 0..255.

## Number format and transform

All transform values are 35-bit two's complement Q10.24: 1 sign bit, 10
integer bits and 24 fraction bits. The source design specifies this format.
With level-shifted 8-bit pixels, every coefficient of the orthonormal DCT lies
in [−1024, 1024), so nothing overflows. The DC term of an all-black block is
exactly −1024.

The 1-D transform is a plain constant-matrix product, computed fully in
parallel:

    X[k] = Σn C[k][n]·x[n],  C[k][n] = a(k)·cos((2n+1)kπ/16),  a(0)=√(1/8), a(k>0)=1/2

The constants are Q1.24. They are built in `fusion_pkg::dct_coef` from the
seven values `round(0.5·cos(jπ/16)·2^24)`, j = 1..7, using the symmetries of
the cosine. The IDCT uses C transposed. Each output is rounded to 24 fraction
bits and saturated. Against a double-precision DCT, the coefficient error seen
in simulation is below 5·10⁻⁵. An 8x8 DCT followed by the IDCT returns every
8-bit pixel exactly.

Coefficient order: the 2-D DCT emits a block as eight vectors, one per clock.
Vector *k* is column *k* of the coefficient block: element *l* is D(l,k), with
*l* the vertical frequency and *k* the horizontal frequency. The DC term is
element 0 of vector 0. The same order is used on `coef_*`.

## The 2-D transform and its ping-pong transpose

`dct2d` writes the first 1-D transform's output, one vector per clock, into
one of two 8x8 transpose memories. A single "input/output selection" bit
chooses that memory, and the read side uses the inverted bit. After eight
vectors the bit flips. The next block is then written into the other memory
while the full one is read out column by column into the second 1-D
transform. Throughput is therefore one block per 8 clocks with no bubbles.
Gaps between input vectors are allowed.

The first output vector of a block appears 6 clocks after its last input
vector: 2 clocks for the first 1-D stage, 1 for the write, 1 for the read and
2 for the second 1-D stage. Blocks are framed by counting vectors from reset.

## Decision and consistency verification — the subtle part

**Contrast measure.** `decision_block` first adds the magnitudes of the 8
coefficients of each incoming column in one clock. The DC term is masked in
column 0. That partial sum then enters an accumulator whose other operand is 0
on the first column of a block and the running sum otherwise. At the end of
the block, the two totals are captured in hold registers and compared. The
sums keep full precision (41 bits). The decision is valid 4 clocks after the
block's last column.

**Tie rule.** A tie (C_A = C_B) selects B. This follows the method's equation
(+1 only when C_A > C_B) and its flowchart. The comparator in the source
block diagram is labelled "A>=B", which would select A instead.

**Absolute or signed sum.** The method is stated once as "sum of all
coefficients minus DC" and once as "sum of all absolute AC coefficients".
The absolute form is implemented, since it is the one described for the
hardware.

**Majority filter.** Decisions arrive in raster order of blocks, one per 8
clocks. They are stored in a four-row decision-map buffer. The filtered value
of block (x, y) is computed from its nine neighbours with the adder tree of the
source figure: three sums of three, then two more adds. The total is compared
with ≥ 5. With decisions read as ±1, this is the method's rule "take A when
R_n > 0".

Neighbours outside the image are replaced by the centre block's own decision.
The source does not say how borders are handled.

A filtered decision can be computed only once the decision of the block
diagonally below-right has arrived. So every block waits roughly one block row
in the coefficient FIFOs. This is why the FIFOs must hold about
8·(W/8 + 3) columns: 4096 columns of 280 bits each for 3840-pixel rows. At the
end of a frame, the last block row drains on its own, paced by data select.

**Bypass.** `cv_en = 0` applies the raw decision instead (DCT+Amp_max without
consistency verification). The raw decision travels with the filtered one, so
the timing does not change.

## Top level (`fusion_top`)

Parameters: `IMG_W = 3840`, `IMG_H = 2160`. The memory depth, the FIFO depth
and the counter widths are derived from them.

| port | dir | meaning |
|---|---|---|
| `wr_en_a`, `wr_addr_a`, `wr_data_a[8]` (and `_b`) | in | host writes one 8-pixel word per clock into image A / B, address `y*cfg_wb + x/8` |
| `wr_ready` | out | writes are accepted (no frame running); a write while busy is an assertion error |
| `cfg_wb`, `cfg_hb` | in | image size in 8x8 blocks (1..480, 1..270), sampled at `start` |
| `cv_en` | in | 1: consistency verification on; sampled at `start` |
| `start`, `busy`, `done` | in/out/out | fuse one frame; `done` pulses one clock after the last fused coefficient vector |
| `coef_valid`, `coef_idx`, `coef_dec`, `coef_vec[8]` | out | fused coefficients, 8 columns per block, Q10.24; `coef_dec` = 1 if the block came from A |
| `pix_valid`, `pix_row`, `pix_vec[8]` | out | fused pixels after the IDCT, 8 rows per block, up to 15 clocks after `done` |

**Timing.** The datapath runs at 8 pixels per clock and emits 8 coefficients
per clock. Start to first fused coefficient takes 30 clocks for a one-block
image. Each block of image width adds 8 clocks, because of the majority
filter's wait for the next block row: for example 86 clocks at 6 blocks wide,
550 at 64 blocks wide (a 512x512 image), and about 3,900 at 480. The
published design reports a latency of 70 clocks without saying how it is
counted, so this figure is not expected to match.

A full 3840x2160 frame fuses in 1,040,583 clocks (measured): 5.2 ms, or 192
frames/s, at 200 MHz. Loading both images through the single-port memories
takes another 1,036,800 clocks, because the two images load in parallel. That
gives about 96 frames/s including the load, above the 60 frames/s the source
claims for 4K.

**Reset.** `rst_n` is an active-low asynchronous reset of all control state.
Datapath registers and memories are not reset. Every value is written before
it is read.

## Departures from the published design and open points

- **Memory.** The published design has no memory capacity and no host
  interface. This RTL uses a frame-sized memory per image and a host write
  port that shares the single memory port. Therefore loading and fusing do not
  overlap.
- **Memory models.** The memories are written as arrays, with one-clock read
  latency. These arrays replace the SRAM macros of the transpose memories,
  FIFOs and image memories.
- **1-D DCT algorithm.** The source cites another work for its 1-D DCT. Here it
  is a direct constant-matrix product in two pipeline stages. It is easy to
  read, but it is larger than a fast-DCT factorisation.
- **Decision input.** The decision block's accumulator adds one column sum per
  clock. The source figure shows one input per image, and its DCT width is not
  stated.
- **Not reproduced.** The source's FPGA and 90 nm figures were not reproduced:
  42 % of a Virtex-4 LX200, 221 MHz, 250 mW and 846 k gates.
- **JPEG back end.** The JPEG quantiser and entropy coder are not included.

## Files

- `rtl/fusion_pkg.sv`: widths, types, cosine constants, rounding,
  level-shift and pixel conversions.
- `rtl/pix_bank.sv`, `rtl/image_mem.sv`, `rtl/block_reader.sv`: memories and
  block-order reading.
- `rtl/dct1d.sv`, `rtl/transpose_mem.sv`, `rtl/dct2d.sv`, `rtl/idct2d.sv`:
  the transforms.
- `rtl/decision_block.sv`, `rtl/majority_filter.sv`, `rtl/coef_fifo.sv`,
  `rtl/data_select.sv`: the fusion logic.
- `rtl/fusion_top.sv`: the top level.
- `tb/tb_<module>.sv`: one self-checking testbench per module.
  `tb/tb_ref_pkg.sv` holds the floating-point reference DCT/IDCT and a
  synthetic image-pair generator. In each pair, every block is textured in one
  image and smooth in the other, split left/right with scattered exceptions so
  the majority filter has work to do.
- `tb/tb_fusion_top.sv` fuses seven frames, up to 512x512 pixels, at the
  default parameters, with the filter on and off. It checks every coefficient, decision and pixel
  against the reference, and the frame cycle counts.
- `tb/tb_fusion_full.sv` fuses one full 3840x2160 frame and checks all
  17.6 million values. It takes about 15 s of simulation.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and finishes. Example
with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fusion_top \
  rtl/fusion_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_fusion_top.sv
./obj_dir/Vtb_fusion_top
```

Replace `tb_fusion_top` with any other testbench name. Packages must come
first on the command line. The frame size of a run is set with
`cfg_wb`/`cfg_hb`, so small images need no change of parameters. To build for
a smaller maximum image, override `IMG_W`/`IMG_H` on `fusion_top`.
