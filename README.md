# HALO-CAT in SystemVerilog: an activation-localized CIM processor for hidden networks

A *hidden network* (HNN) is a neural network whose weights are never trained
and never stored: they are random numbers, and what is learned is a sparse
binary *supermask* that switches individual random weights on or off. A chip
can therefore regenerate every weight on the fly from a random-number
generator and a mask bit. With weights almost free, the expensive thing left
is moving *activations*. HALO-CAT attacks that from two sides:

* **Layer-penetrative tiling.** One small tile of the image (8x8 pixels at
  the start of ResNet50) is pushed through many layers (more than ten) before
  the next tile starts. Every layer is a *block convolution*: the tile is
  zero-padded at its own edge, so no neighbouring tile is ever needed, and
  the weights are simply regenerated for each tile. When strides shrink the
  tile too far, *tile concatenation* (TC) parks the output of one tile,
  computes its neighbour up to the same layer, and joins the two into a tile
  twice the size.
* **Activation-localized compute-in-memory.** Activations live in three
  16KB compute-in-memory (CIM) cores. A layer reads its input *in place*
  from one core (the iCIM). The near-memory pipeline (NMP) writes the
  results straight into another core (the oCIM). The next layer computes
  directly from that core. The roles rotate, and the third core holds the
  shortcut of a residual connection.

This RTL implements that processor: the three CIM cores (with a digital
model of the analog macros), the NMP, the weight path (WGEN, supermask
memory MMEM, weight buffer WBUF), the tile memory TMEM, the instruction
memory IMEM and a top controller. It follows the organisation, sizes and
dataflow of the HALO-CAT paper (Chen, Ando, Fujiki, Takamaeda-Yamazaki,
Yoshioka). The paper describes the controller, the instruction set, the
host interface and several widths only by name, so those are this design's
own choices. They are marked as such below and in each file's header.

## Block diagram

```
             host: IMEM / MMEM load, core words in/out, start/done
                                   |
   IMEM 32KB --> top_ctrl ----------------------------------------------+
                    | mask address        | roles, rows, passes          |
                    v                     v                              |
   MMEM 32KB --mask--> WBUF <--signs-- WGEN                              |
                        | 128-bit weight vector (broadcast)              |
          +-------------+-------------+                                  |
          v             v             v                                  |
      CIM core 0    CIM core 1    CIM core 2       TMEM 24KB <-- copies -+
      (16KB each: 8 groups x 8 macros x 128 clusters x 16 rows)
          |  8 MAC outputs of the iCIM          ^ 8 results to the oCIM
          v                                     |
        NMP: MAC shifter -> 8 accumulators -> scale, shift, bias,
             depth sum (shortcut from the third core), ReLU and clamp
```

## The CIM core and where an activation lives

Read this section first: the rest of the design follows from the layout.

A core is a 4-D array of single-bit SRAM cells, and each dimension is a
dimension of the activation tile:

| level   | count | tile dimension | RTL |
|---------|-------|----------------|-----|
| group   | 8     | tile column `w` (tile width W) | `cim_core` generate loop `g_group` |
| macro   | 8     | bit `p` of the 8-bit activation (precision P) | `g_macro` |
| cluster | 128   | channel `c mod 128` (channel depth C) | bit index in `cim_macro` |
| row     | 16    | tile row and channel chunk | row index in `cim_macro` |

8 x 8 x 128 x 16 bits = 16KB. Activation `(w, h, c)` has its bit `p` in
group `w`, macro `p`, cluster `c mod 128`, at row `h * chunks + c / 128`,
where `chunks = ceil(C / 128)`. A pixel with more than 128 channels therefore
takes several consecutive rows. That is how the paper handles deep channels.
A layer must fit `H * chunks <= 16`: an 8x8 tile can carry 256 channels, a
4x4 tile 512.

**Shallow layers** (at most 64 channels) would leave most clusters empty, so
several pixel rows can share one core row, as the paper suggests. With
`lg` = log2 of the clusters given to each pixel (0..6; 7 means the normal
layout above), a row holds `2^(7-lg)` pixel rows. Pixel row `h` sits at core
row `h >> (7-lg)`, in clusters `(h mod 2^(7-lg)) * 2^lg` onward, and a layer
may then have at most `2^lg` channels. For example, 64 channels use `lg = 6`:
two pixel rows per core row, so an 8x8x64 tile takes 4 rows. The exact slot
layout is this design's choice. Each layer sets it separately for its input
(`in_lg`) and its output (`out_lg`).

**One MAC cycle** activates one row in all 64 macros and broadcasts a
128-bit weight vector (one bit per channel) to all of them. Each cluster's
local computing unit forms `activation bit AND weight bit`. The 128
products of a macro are summed by charge sharing and converted by a 7-bit
ADC. The compressor of each group then recombines the eight bit planes,
`sum_p code_p * 2^p`. The core thus returns, for all eight tile columns at
once, the dot product of an 8-bit activation vector with a binary weight
vector over 128 channels. The row (tile height) is walked serially; column,
channel and bit plane are parallel.

`cim_macro` is a behavioural model of the analog macro. The charge sharing
and conversion are replaced by an exact popcount and an ideal 7-bit
quantiser. 128 products set cannot be represented in 7 bits, so that one
case saturates to 127. The paper's figure of 0.14 LSB rms analog noise is not
modelled. Everything else is synthesizable logic.

Each core also has a **digital port**: one 64-bit word is the eight 8-bit
pixels of one (row, cluster), with a per-group write mask. The NMP writes
results through it (core as oCIM). The controller reads shortcut operands
through it (core as residual store), and TMEM copies and the host use it too.

## Weights: random signs, supermask, two passes

A weight is `+1` or `-1` (its random sign) where the supermask bit is 1,
and `0` where it is 0.

* `wgen` regenerates the signs of any 128-channel weight vector from its
  index, with nothing stored. It is counter-based, so the same index always
  gives the same signs, on every tile. From `(seed, oc, kpos, chunk)`, where
  `seed` is the instruction's 12-bit layer seed zero-extended to 16 bits, it forms
  `x = ({seed,16'h0} ^ {4'h0,oc,kpos,chunk,6'h0}) ^ 32'h9E3779B9` (1 if
  zero). Four xorshift32 steps (`x^=x<<13; x^=x>>17; x^=x<<5`) then give
  32 sign bits each. The paper asks only for a standard random number
  generator; this particular one is a choice of this design.
* `mmem` holds the supermask words. Word `mask_base + (oc*K*K + kpos)*chunks
  + chunk` belongs to output channel `oc`, kernel position `kpos` and input
  chunk `chunk`.
* `wbuf` applies the mask. The local computing unit multiplies two
  single bits, so a signed weight vector is applied in two passes: first
  `mask & ~sign` (the +1 weights), then `mask & sign` (the -1 weights). The
  NMP adds the first pass and subtracts the second. This two-pass scheme is
  this design's choice; the paper does not say how signs are handled.
  For a packed input (`in_lg < 7`) WBUF keeps only the low `2^in_lg` bits
  of the vector and moves them up to the slot of the pixel row being read.
  The other pixel rows in that core row then see weight 0.

## Convolution in the near-memory pipeline

A K x K convolution is split into its K^2 kernel pixels. Each pixel is one
MAC pass over one input row of the iCIM. For output row `ho` and kernel
pixel `(ky, kx)`, the pass reads input row `hi = ho*stride + ky - (K-1)/2`.
The eight MAC outputs are the contributions of input columns `0..7`. The
**MAC shifter** moves them to the output columns they feed: lane `w` takes
MAC output `w + kx - (K-1)/2`. For a 3x3 kernel the first column shifts
right, the middle not at all and the last left. The shifter inserts **zero**
where that index leaves the tile (`0 .. tile_w-1`). A pass whose `hi` lies
outside the tile is skipped. Together these give the in-tile zero padding of
block convolution: nothing from a neighbouring tile is needed, and no extra
input buffer is needed either. Eight signed 24-bit accumulators (`reg1..reg8`)
sum all passes of an output row:
`K*K kernel pixels x chunks x 2 sign passes`.

Post-processing then runs in one clock, per lane:

```
v   = ((acc * scale) >>> shift) + bias + (res_en ? shortcut : 0)
out = clamp(v, 0, 255)
```

`scale` (8-bit), `shift` (0..31) and `bias` (signed 16-bit) are per layer.
The paper names a *Depth Sum* stage here without describing it. In this
design it adds the 8-bit shortcut activations of a residual connection,
read from the third core. The clamp to 0..255 is the ReLU: activations are
stored as unsigned 8-bit bit planes, so every stored layer output is
non-negative.

**Stride 2** computes the output row at input row `2*ho` and keeps only the
even NMP lanes when writing (lane `2j` goes to group `j`). An 8x8 tile
becomes 4x4. This stride handling is this design's choice.

## Tile concatenation

`TSAVE` copies `t_rows` rows x 128 clusters of a core into TMEM (one 64-bit
word each, from `tm_base`). `TLOAD` copies them back into a core, moved
down by `t_rowoff` rows and across by `t_gshift` groups, and writes only the
`tile_w` groups of the saved tile. Concatenating two 4-wide tiles
side by side works like this. Compute tile A and save it. Compute tile B
into groups 0..3. Then `TLOAD` A with `t_gshift = 4`. The core now holds an
8-wide tile, and the next layer runs on it with `tile_w = 8`. Concatenation
along the height uses `t_rowoff` instead.

## The program

The top controller runs 128-bit instructions (`halo_cat_pkg::instr_t`)
from IMEM word 0 until `END`. The instruction set is this design's own.

| op      | fields used | action |
|---------|-------------|--------|
| `CONV`  | `in_core`, `out_core`, `res_core`, `res_en`, `ksize` (odd, 1..7), `stride` (1, 2), `tile_w`, `tile_h`, `cin_chunks`, `cout`, `scale`, `shift`, `bias`, `mask_base`, `seed` (12 bit), `in_lg`, `out_lg` | one layer on the current tile |
| `TSAVE` | `in_core`, `t_rows`, `tm_base` | core -> TMEM |
| `TLOAD` | `out_core`, `t_rows`, `tm_base`, `tile_w`, `t_gshift`, `t_rowoff` | TMEM -> core |
| `END`   | | raise `done` |

The roles of the cores are fields of each `CONV`. A program makes the
activations stay local by making each layer's `in_core` the previous layer's
`out_core`. Output channel `oc` of a layer goes to row `ho*ceil(cout/128) +
oc/128`, cluster `oc mod 128`: the layout the next layer expects. With
`out_lg < 7` it goes to row `ho >> (7-out_lg)` and cluster
`(ho mod 2^(7-out_lg)) * 2^out_lg + oc`. The shortcut operand is read from
the same place in `res_core`, so it must use the output's layout.

**Timing.** The weight path is a three-stage pipeline. Issue reads MMEM.
In stage 1, WGEN and WBUF form the masked vector. In stage 2 the iCIM does
its MAC. In stage 3 the NMP accumulates. One pass is issued per clock;
passes outside the tile are issued as bubbles. Exact clock counts:

* taking `start`: 1
* fetching and decoding an instruction: 2
* a `CONV`: `cout * out_h * (6 + 2*K*K*cin_chunks)`. The 6 clocks per
  output row are: accumulator clear (1), pipeline drain (3, with the
  shortcut read), post-processing (1) and the oCIM write (1).
* a `TSAVE`/`TLOAD`: `128 * t_rows + 1`

For example, a 3x3 layer on an 8x8 tile, 128 channels in and 128 out, takes
`128 * 8 * 24 = 24576` clocks. The paper gives no throughput to compare with.

## Host interface

The top has no parameters. Everything is sized by `halo_cat_pkg`, at the
paper's numbers. While `busy` is low the host can:

* write IMEM (`host_imem_*`) and MMEM (`host_mmem_*`), one word per clock;
* read or write a core word (`host_core_*`, read data one clock later) to
  load an input tile and fetch results;
* read TMEM (`host_tm_*`). The paper shows a SIMD unit next to TMEM but
  does not say what it does, so its connection point is left as this port.

A one-clock `start` runs the program; `done` is set by `END` and stays set
until the next `start`. Supermasks for layers larger than MMEM must be
reloaded between programs (see below).

## How far the design goes

Follows the paper:
* three 16KB cores of 8 groups x 8 macros x 128 clusters x 16 rows
* AND-type local computing unit, 7-bit ADC per macro, shift-add compressor
* deep channels spread over several rows; several pixels in one row for
  shallow channels
* MMEM 32KB, TMEM 24KB, IMEM 32KB
* the NMP stage order: MAC shifter, accumulators, Scale, Shift, Bias,
  Depth Sum, ReLU & Clamp
* iCIM/oCIM role rotation, a third core for residuals
* block-convolution padding and tile concatenation through TMEM

This design's own choices: the instruction set and controller, the weight
generator, two-pass signed weights, the meaning of Depth Sum, stride
handling, the pixel-slot layout for shallow layers, all bus widths and
latencies, and the host interface.

Capacity against ResNet50 with the paper's tile sizes:
* Blocks 1 and 2 fit: an 8x8 tile with 256 channels, and 4x4 or 8x4
  tiles with 512 channels, each need exactly 16 rows. The 64-channel layers
  of block 1 pack two pixel rows per core row and take 4 rows.
* Block 3 after concatenation does not fit. A 4x4 tile with 1024 channels
  needs 32 rows.
* Block 4 does not fit either. Its 2x2 and 4x2 tiles with 2048 channels
  need 32 rows.

The data volume of those tiles equals one core, so the chip must place
channels in the groups that a narrow tile leaves idle. The paper does not
describe that mapping, and it is not built.

Other limits: MMEM holds 2048 mask words, while one 3x3 layer with 512
channels in and out needs 18432, so masks must be streamed between
programs. Pooling, the ResNet stem's max-pool and the final classifier are
not built. The SIMD unit is not built.

## Files

`rtl/`:
* `halo_cat_pkg.sv`: geometry constants, `instr_t`, opcodes
* `cim_macro.sv`: behavioural model of the analog macro
* `cim_compressor.sv`, `cim_core.sv`
* `wgen.sv`, `wbuf.sv`
* `mmem.sv`, `tmem.sv`, `imem.sv`
* `nmp.sv`, `top_ctrl.sv`
* `halo_cat_top.sv`: the processor

`tb/` has one self-checking testbench per module, `tb_<module>.sv`. Each
prints `TB_RESULT checks=N failures=M`.

`tb_halo_cat_top` runs the full-size processor end to end:
1. A 256-channel 8x8 input tile is loaded.
2. A bottleneck block runs: 1x1, 3x3, then 1x1 with the shortcut added.
   The 8-channel results of the first two layers are stored packed, with 8
   and 16 clusters per pixel.
3. A stride-2 3x3 layer follows.
4. A TSAVE/TLOAD concatenation ends the program.

The iCIM role rotates over all three cores. The test compares every word of
all three cores with its own reference model, checks the clock count against
the schedule above, and checks that each mechanism occurred. It runs in
about a second.

Two more end-to-end tests run ResNet50 pieces on the full-size processor,
with ResNet50's channel counts and random masks:
* `tb_resnet50_block1` runs the first two bottleneck blocks on one 8x8 tile.
  The 64-channel layers are packed, two pixel rows per core row. Between the
  two programs the host reloads MMEM and IMEM.
* `tb_resnet50_block2` runs the entry of the second stage on two neighbouring
  8x8x256 tiles. The stride-2 layers turn each tile into 4x4x512, and the
  first tile is parked in TMEM. The two are then joined into one 8x4 tile,
  and two more layers run on the joined tile.
Both tests check every core word and every program's clock count. Each
runs in a few seconds.

To simulate with Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/halo_cat_pkg.sv tb/tb_halo_cat_top.sv --top-module tb_halo_cat_top
./obj_dir/Vtb_halo_cat_top
```

Replace `halo_cat_top` with any module name to run that module's test. To
change the core geometry, edit the constants in `halo_cat_pkg`. The
instruction fields assume at most 16 rows, 8 groups and 128 clusters, so
change them along with the constants.
