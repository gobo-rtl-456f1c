# GOBO accelerator in SystemVerilog

Transformer language models such as BERT spend most of their time and energy
in fully-connected layers with hundreds of millions of FP32 weights. GOBO
stores those weights as a **dictionary**:

- Almost every weight of a layer is replaced by a 3-bit index into a table
  of 8 FP32 centroids.
- The few weights that lie far from the rest of the layer's distribution
  (the *outliers*, about one in a thousand) are kept as exact FP32 values.

This cuts the weight storage about tenfold and costs no accuracy. The same
encoding also changes the arithmetic. A dot product `sum_i w_i * a_i`, where
each `w_i` is one of 8 values `c_k`, can be rewritten as
`sum_k c_k * (sum_{i: idx_i = k} a_i)`:

- the inner sums need only adders, one running sum per centroid;
- only 8 multiplications per output are left, plus one per outlier.

This RTL implements an accelerator built around that rewrite. It also
implements the GOBO *decompression engine*, which lets an ordinary FP32
accelerator keep its weights GOBO-compressed in DRAM.

All arithmetic is IEEE-754 binary32 with:

- round to nearest, ties to even;
- subnormals flushed to zero;
- a quiet NaN `0x7fc00000` for invalid results.

## Weight layout: submatrices, blocks and outliers

A layer's weight matrix is cut into 16x16 **submatrices (SMs)**. A tile works
on one strip of 16 output rows and walks through the SMs of that strip. It
takes 16 input activations per SM.

Inside an SM the weights are grouped into 16 **blocks** of 16 indexes:

- Block `t` holds, for every row `p`, the weight that meets activation
  `(p - t) mod 16`. In other words, block `t` is one wrapped diagonal of the
  SM.
- In the weight bank a block is a 64-bit word. Field `p` (bits `4p+3:4p`)
  holds row `p`'s index. In 3-bit mode bit 3 of each field is ignored.
- An outlier keeps a dummy index in its block. Its real value travels
  separately as a 40-bit entry `{B[3:0], W[3:0], V[31:0]}` (`ocf_entry_t` in
  `gobo_pkg`):
  - `B` is the block within the SM;
  - `W` is the row (the position within the block);
  - `V` is the FP32 value.

Each SM's outliers follow an entry that carries the SM's outlier count in
bits 39:32. After the last SM come the 8 centroids, each in bits 31:0 of one
entry. This is the *outlier/centroid stream* of a tile.

## The tile (`gobo_tile`)

A tile has these parts:

- 16 processing elements (`gobo_pe`). Each is an FP32 adder and an 8x32-bit
  register file, with one running sum per centroid.
- A special-purpose unit (`gobo_spu`). It has one FP32 multiplier, one FP32
  adder, a 16x32-bit output register file, a 16:1 mux that picks a PE's
  register file, and a 2:1 mux that can bypass it.
- A pair of 16-entry circular activation buffers (`gobo_act_buffer`).
- Two FIFOs (`gobo_fifo`), one for weight blocks and one for the
  outlier/centroid stream.
- The control unit, which is part of `gobo_tile` itself.

A group of work ("output group") is `n_sm` SMs of one 16-row strip. It
produces 16 outputs, or 16 partial sums when the strip is split over several
tiles.

**Phase 1: accumulation.**

- The *current* activation buffer rotates by one each cycle, so in cycle `t`
  of an SM, PE `p` sees activation `(p - t) mod 16`.
- At the same time the PE takes index `p` of block `t` and adds the
  activation into that register-file entry.
- Meanwhile the *staging* buffer loads the next SM's 16 activations, one per
  cycle. After 16 cycles the two buffers swap.
- Without outliers an SM therefore takes exactly 16 cycles, and activations
  flow in at one per cycle without a gap.
- The first SM's activations need 16 cycles of fill before phase 1 starts.

**Outliers.** This is the subtle part, and it runs during phase 1.

- An outlier `(B, W, V)` belongs to activation column `col = (W - B) mod 16`.
- In cycle `B` the control unit disables PE `W`, so the dummy index adds
  nothing.
- The activation of column `col` passes PE15 in cycle `(15 - col) mod 16`.
  In that cycle the SPU's 2:1 mux selects the PE15 activation instead of a
  register file. The SPU multiplies it by `V` and adds the product into
  output `W`.
- This runs alongside the PEs, so a single outlier costs nothing.
- When `k` outliers of one SM share a column, the whole array stalls `k - 1`
  cycles. During a stall the PEs are disabled and the buffer does not rotate.
  The SPU applies one outlier per cycle.
- While an SM is being processed, a loader reads the next SM's count and
  outliers into the other of two banks of `OUTL_SLOTS` (16) registers. The
  SPU is therefore never waiting on the FIFO at an SM boundary.
- An SM with more than `OUTL_SLOTS` outliers sets `overflow`. Its extra
  outliers are lost.

**Phase 2: centroids.** For each of the 8 centroids in turn, the SPU spends
16 cycles on `out[p] += rf_p[c] * centroid[c]`. Phase 2 therefore takes
8 x 16 = 128 cycles.

**4-bit indexes.** Some layers of some models need 16 centroids. In
`wide_mode` two neighbouring tiles form a pair:

- Both tiles get the same activations and the same blocks of 4-bit indexes.
- The lower tile (even number) accumulates indexes 0..7. Its
  outlier/centroid stream carries all the outliers and centroids 0..7.
- The upper tile accumulates indexes 8..15. Its stream carries zero counts
  and centroids 8..15.
- After phase 2 the lower tile reads the upper tile's 16 outputs and adds
  them into its own (16 more cycles).
- The result is read from the lower tile.

**Timing of one group.** From `start` to `done` a tile takes
`16 + 16*n_sm + stalls + 128` cycles. In wide mode add 17. The top adds one
cycle for the global buffer's registered read.

For example, 8 SMs (a 16 x 128 slice of a layer) take 272 cycles:

- 128 of those cycles are phase 2, and they do not grow with `n_sm`;
- a tile reaches 16 additions per cycle during phase 1.

## The global buffer (`gobo_global_buffer`)

The global buffer holds three kinds of banks:

| Bank | Organisation | Default size |
|---|---|---|
| Activations | one bank shared by all tiles, `AB_DEPTH` x 32 bit | 262,144 words = 1 MB |
| Weights | one bank per tile, `WB_DEPTH` x 64 bit | 128 blocks, 768 KB over 768 tiles |
| Outliers and centroids | one bank per tile, `OB_DEPTH` x 40 bit | 64 entries, 240 KB |

The activation bank is shared because every tile consumes the same
activation in the same cycle. Its output is broadcast. Together the banks
come to about 2 MB.

A host write port (`host_we/bank/tile/addr/wdata`) fills any word. Loading
from DRAM is left to the system around the chip.

`start` restarts three sequential streams:

- activations, from `act_base`;
- weight blocks, from address 0 of every weight bank;
- outlier/centroid entries, from address 0 of every outlier bank.

Running the next input word of a sentence is another `start` with another
`act_base`, over the same weights already in the banks. This is how weights
are reused across words. An activation is handed out only when every tile
can take it. A tile that stalls on an outlier collision therefore holds back
the others' staging buffers, but never their current SM.

## The top (`gobo_top`)

`gobo_top` contains:

- `NUM_TILES` tiles (default 768);
- the global buffer;
- the tile-pair wiring for 4-bit mode;
- a read port (`rd_tile`, `rd_addr`, `rd_data`) for the 16 outputs of each
  tile.

One `start` runs one output group on all tiles at once:

- `done` is the AND of all tiles' done flags;
- `overflow` is the OR of their overflow flags;
- `wide_mode` is sampled at `start`.

Mapping a layer onto the tiles is left to the host:

- Each tile takes a 16-row strip and up to `WB_DEPTH/16` = 8 SMs (128
  inputs) per bank load.
- When a strip is longer than that, it is split over several tiles as
  partial sums, or over several bank loads.
- Partial sums are added outside the tiles.

The decompression engine sits in the top as a separate unit with its own
ports, because it serves a different system (see below).

At the default sizes a bank load holds:

- 768 x 8 = 6,144 SMs;
- 768 x 16 x 128 = 1.57 M weights.

How BERT-sized layers fit into that:

- **768x768** (BERT-Base attention, pooler): 2,304 SMs, so one load.
- **768x3072 and 3072x768**: two loads each.
- **BERT-Large 1024x4096**: three loads.

The activation bank holds 85 words of a 3072-wide layer, or 64 words of a
4096-wide layer. A 128-word sequence of those layers therefore runs in two
passes.

## The decompression engine (`gobo_decomp`)

A GOBO *container* keeps a layer in DRAM in three sections:

1. A header: the dimensions, the index width and the centroid table.
2. The 3-bit indexes in the original weight order, with dummy indexes where
   the outliers are.
3. The outliers, SM by SM, each SM behind its 8-bit count.

The engine reads the container as two sequential streams, each into its own
FIFO.

**Stream 1** (48-bit words) carries the header, then one block of 16 indexes
per word:

- word 0: `{cols/16, rows/16}` in bits 31:16 and 15:0;
- word 1: the index width, which must be 3, otherwise `hdr_error` is set;
- words 2..9: the 8 centroids.

**Stream 2** (40-bit) carries the count entries and the outliers.

The centroids are loaded into one lookup table per output lane (16 lanes).
Each block is then translated into 16 FP32 weights in one cycle. Any
outliers of that block overwrite their lanes, one per cycle. The output
stream has `valid`/`ready` handshaking and a `last` flag for the layer's final
block.

## Departures from the source description and open points

- **64-bit weight blocks.** The original design quotes 48-bit blocks (16 x
  3 bits). This RTL stores 16 x 4-bit fields so that one bank format serves
  both the 3-bit and the paired 4-bit mode.
- **Bank sizes.** The split of the ~2 MB global buffer into banks, and all
  FIFO depths, are this design's choice.
- **Handshakes, reset and register-file clearing.** These are this design's
  own, and all registers are reset.
- **Floating-point details.** The rounding and the subnormal handling are
  not specified in the source. The FP units are single-cycle combinational
  logic, so the clock rate of the original 1 GHz design is not reproduced.
- **Outlier overflow.** Outliers per SM beyond `OUTL_SLOTS` are dropped and
  flagged rather than handled. The source design allows up to 255 per SM
  (an 8-bit count).
- **Container encoding.** The decompression engine's header and stream word
  formats are invented here. Row padding in DRAM is assumed to be removed
  before the engine.
- **Not built:**
  - DRAM and the memory controller;
  - the FP16 variant of the tile;
  - the multi-tile scheduling of whole models, which is left to a host.

## Files and simulation

All files are in `rtl/` and `tb/`.

**Shared code:**

- `gobo_pkg.sv` holds the shared constants and types.
- `tb/tb_fp_ref_pkg.sv` is the testbenches' FP32 reference. It uses
  double-precision arithmetic with an explicit round-to-nearest-even
  conversion.

**RTL modules:**

- `fp32_add`, `fp32_mul`;
- `gobo_fifo`, `gobo_pe`, `gobo_act_buffer`, `gobo_spu`;
- `gobo_tile`, `gobo_global_buffer`, `gobo_decomp`;
- `gobo_top`.

**Testbenches.** Every module has a self-checking testbench `tb/tb_<module>.sv`
that prints `TB_RESULT checks=N failures=M`. The tile and top testbenches:

- compare every output bit for bit with a model that repeats the hardware's
  order of FP32 operations;
- check the cycle count of every group.

`tb_gobo_top` runs with 4 tiles. It covers:

- outliers, including a column collision (stall);
- two input words on the same weights;
- a 4-bit tile pair;
- an outlier overflow;
- a decompression-engine layer.

It counts each of these events and fails if one never happened.

The largest configuration simulated end to end is this 4-tile top. At the
default size (768 tiles, about 2 MB of banks) the top passes lint and
elaboration. A simulation of it was not run, because the C++ build of the
simulation model alone takes well over ten minutes. The testbench's
sampling of tiles and its size constants are written so that they can be
raised toward the default size.

Example, from the repository root:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl \
  --top-module tb_gobo_top rtl/gobo_pkg.sv tb/tb_fp_ref_pkg.sv tb/tb_gobo_top.sv
./obj_dir/Vtb_gobo_top
```

Replace `tb_gobo_top` with any other testbench name.
