# A hybrid dense/sparse accelerator for sub-precision activation sparsity

## The idea

When an LLM is quantized to 4-bit (or 2-bit) weights and 8-bit activations, most activations
are still small. In a typical layer, half or more of the Int8 activation values lie between
0 and 15, so their upper four bits are all zero. This is not sparsity in the usual sense,
because the values themselves are not zero. What is redundant is their top half.

The design stores and computes on every Int8 activation `x` as two 4-bit parts:

    x = 16 * MSB4 + LSB4        LSB4 unsigned (0..15), MSB4 signed (-8..7)

- **LSB4** is kept for every element. It is a dense 4-bit tensor.
- **MSB4** is kept only where it is non-zero.
- A one-bit **precision bitmap (PBM)** marks the elements that have an MSB4.

`PBM = 0` exactly when `x` is in `[0, 15]`. Negative values always have a non-zero MSB4,
because the sign lives in the top nibble.

A product `x * w` with an Int4 weight `w` then splits into two 4x4 products:

    x * w = (LSB4 * w) + ((MSB4 * w) << 4)

The accelerator computes the two parts one after the other on the same Int4 x Int4 MACs:

1. A **dense pass** over every LSB4.
2. A **sparse pass** over only the non-zero MSB4 values.

The accumulator is output-stationary, so both passes add into the same register, and the
result is bit-exact with an Int8 x Int4 product. The sparse pass gets shorter as the MSB4
sparsity grows. Memory traffic falls too, because a stored activation costs 4 + 1 bits
plus 4 bits only where needed.

### Clipping to raise sparsity

Sparsity can be raised further by clipping selected activations toward the band where
MSB4 = 0. Each layer has two constants, `l < 0` and `h > 15`:

- a value in `[l, 0)` becomes 0;
- a value in `(15, h]` becomes 15.

This only happens in *low-importance* columns. A column's importance is the L1 norm of the
weight row it multiplies. The least important columns are chosen offline and stored as a
1-bit-per-channel mask. The hardware applies the clip to the outputs of one layer as they
are written back, which are the inputs of the next layer.

## Top level

`sparqle_top` runs one linear layer, `OUT[M][N] = requant(X[M][K] * W[K][N])`:

- `X` is read from on-chip SRAM in the compressed form.
- `W` is Int4, or Int2 held sign-extended as Int4.
- `OUT` is written back to SRAM in the same compressed form, so it can be the next layer's `X`.

| block | module | role |
|---|---|---|
| control | `sparqle_ctrl` | walks the tiles, issues loads, passes and drains |
| load path | `load_unit` (+ `circular_buffer`, `sparse_byte_select`) | SRAM to circular buffers to column-buffer line to PE register files |
| PE array | `pe_array` of `hybrid_pe` | 16 x 16 PEs, 8 Int4 x Int4 MACs each (2048 MACs) |
| drain path | `drain_unit` (+ `requant_unit`, `subprec_clip`, `msb_lsb_splitter`, `sparse_encoder`, `write_combine_buffer`) | accumulators to Int8 to clipped to compressed to SRAM |
| memory | `sram_banks` of `sram_bank` | 1.5 MB, 16 single-port banks of 16 B lines |

Shared constants and the two structs live in `sparqle_pkg`:

- `layer_desc_t` is the layer descriptor.
- `perf_t` holds the run counters.

### Int4-activation mode

The PE also has a single-round mode for Int4 activations, with Int4 or Int2 weights. It is
selected by `desc.a4`:

- Activations are stored as LSB4 lines only, read as signed nibbles.
- Each channel group gets a dense load and a dense pass. There is no sparse load or pass.
- Outputs are saturated to Int4. They are not clipped, and they are written as LSB4 lines only.

A layer is started by driving `desc` and pulsing `start`. `done` pulses once the last output
line is in SRAM. A host port (one 16 B line per cycle, highest SRAM priority) loads `X` and
`W` and reads results. A second small port writes the column-importance mask, 16 channels
per word.

## Memory layout

All addresses count 16 B lines. Line `a` lives in bank `a % 16`. Channel groups are 32 wide
(one LSB4 line, `KT = 32`) and 128 wide (one PBM line). `K` and `N` must be multiples of 128.
`M` can be any size. In a partly filled last token tile, the array rows past `M` are loaded
with the last token again, and they are not drained.

| tensor | line address | contents |
|---|---|---|
| X LSB4 | `x_lsb_base + m*K/32 + kt` | 32 nibbles, channel `kt*32 + i` in nibble `i` |
| X PBM | `x_pbm_base + m*K/128 + kt/4` | 128 bits, 32-bit word `kt%4` covers group `kt` |
| X MSB4 | `x_msb_base + 4*(m*K/128 + kt/4) + j` | a 4-line (128-nibble) slot per 128 channels; the non-zero MSB4 nibbles in channel order, packed from nibble 0 |
| W | `w_base + n*K/32 + kt` | 32 Int4 weights of output channel `n` |
| OUT | same as X, with `o_*_base` and `N` for `K` | |

The MSB4 slot is reserved at its worst-case size. What shrinks is the number of lines
actually read and written:

- A 32-channel group's nibbles start at the population count of the PBM bits before the group.
- They take `ceil`-many lines from there.
- A group with no set PBM bit costs no MSB4 read at all.

This layout is the design's own. The paper describes the tensors but not how they are
placed in SRAM.

## The hybrid PE

Each PE holds these register files:

| register file | size | contents |
|---|---|---|
| LSB4 RF | 32 nibbles | dense LSB4 of one token, one channel group |
| MSB4 RF | 32 nibbles | compressed: entry `i` is the `i`-th non-zero MSB4 |
| PBM RF | 32 bits | bit `c` set when channel `c` has a non-zero MSB4 |
| FL RF | 8 outputs x 32 Int4 | weights |
| OF RF | 8 x Int32 | output-stationary accumulators |

PE `(r, c)` owns token `r` of the tile and output channels `c*8 .. c*8+7`. Activations are
broadcast along a row and weights down a column.

- **Dense pass.** For each of the 8 outputs, four cycles of 8 MACs cover the 32 channels:
  `OCS*KT/MACS = 32` cycles. The sparsity logic is bypassed.
- **Sparse pass.** The sparsity logic turns compressed entry `i` into its channel, which is
  the position of the `i`-th set PBM bit. That pairs `MSB4[i]` with the right weight, and
  only valid pairs go to the MACs. The sum is shifted left by 4 before it is accumulated.
  The pass takes `8 * ceil(nnz/8)` cycles, where `nnz` is the number of non-zero MSB4
  values in this PE's group.
- **Skipping.** A row with `nnz = 0` skips the sparse pass entirely. The array is busy until
  its slowest row finishes.

The MAC adder tree is modelled as one combinational cycle. The paper pipelines it but gives
no depth.

## Load path

The load unit has two independent paths, each with its own SRAM requester and circular
buffer (8 lines):

- **IF** carries activations.
- **FL** carries weights.

Each path can move one 16 B line per cycle out of SRAM (32 B/cycle in total) and one line
per cycle into the array.

- **Dense load.** LSB4 lines go straight from the circular buffer into PE rows, and FL lines
  go into PE columns.
- **Sparse load.** For each token the unit reads the PBM line first. `sparse_byte_select`
  takes the group's 32 PBM bits and the count of set bits before them, and works out:
  - which of the slot's four lines hold the group's nibbles (at most two, for 32 nibbles);
  - the nibble offset of the group's first nibble;
  - the number of nibbles.

  Only those lines are fetched. The nibbles are cut out and written, with the group PBM,
  into the PE row.

A requester that loses a bank holds its request, which is a bank-conflict stall. It also
stops issuing while its circular buffer could overflow.

## Drain path

After the last channel group of a tile, the drain unit reads one token row at a time,
16 accumulators per cycle ("beat"), through this chain:

1. A staging register.
2. `requant_unit`: `y = sat8(acc >>> shift)`.
3. `subprec_clip`, which applies `[l,0) -> 0` and `(15,h] -> 15` where the mask bit is set.
4. `msb_lsb_splitter`: the LSB4 nibbles, plus MSB4 padded to a byte.
5. `sparse_encoder`: the PBM bits plus the packed non-zero MSB4 nibbles.
6. Three `write_combine_buffer`s (LSB4, MSB4, PBM). Each collects nibbles into 16 B lines and
   writes them through its own SRAM requester.

Flow control works like this:

- A beat waits while any buffer is full.
- At the end of a row the MSB4 buffer is flushed.
- The next row starts only when all three buffers are empty, so every row's MSB4 data starts
  at the beginning of its slot.

## Schedule

For each token tile (16 tokens) and each output tile (128 channels), the controller runs:

    clear OF RFs
    for each 32-channel group kt:
        dense load (LSB4 + FL)
        dense pass            || sparse load (PBM + MSB4) into the IF RFs
        sparse pass
    drain

The MSB4 and PBM loads overlap the dense pass, as in the paper's timeline. Nothing else
overlaps: the FL RF and the OF RF are single-buffered.

As a result the schedule is load-bound. A dense load must bring 128 weight lines into the
array at one line per cycle, against 32 cycles of dense compute. In the end-to-end test
(40 tokens, K = N = 256), 7750 of 11629 cycles are spent waiting for loads.

The paper does not give its loop order or the amount of weight reuse across token tiles.
Double-buffering FL, or reusing a weight tile over several token tiles, is the obvious next
step. It is not done here.

## Run counters

`perf` counts the following, cleared by `start`:

- cycles in total;
- dense-pass, sparse-pass, load-wait, drain and load/compute-overlap cycles;
- PE rows whose sparse pass was skipped;
- MSB4 groups needing no MSB4 read;
- clipped and saturated outputs;
- SRAM bank conflicts;
- drain stalls.

## Where this differs from the paper

- **Precision modes.** Two modes are built: Int8 x Int4/Int2 (dense pass plus sparse pass)
  and Int4 x Int4/Int2 (one dense pass). The four-round Int8 x Int8 mode is not built,
  because the FL register file and the MACs only hold Int4 weights.
- **Special functions.** There is no non-linear special-function unit. There are also no
  pooling or element-wise units, and the paper gives none of their internals. Requantisation
  is a plain arithmetic shift with saturation.
- **Splitters.** The paper puts four MSB4/LSB4 splitters after its drain buffer, one per four
  PE columns. Here a single splitter and encoder handle one 16-output beat per cycle.
- **Write banking.** The paper sends LSB4 and MSB4+PBM to separate banks so they never
  collide. Here lines are interleaved over all banks, and collisions are resolved by fixed
  priority (host, drain LSB4, drain MSB4, drain PBM, load IF, load FL) and counted.
- **Off-chip memory.** There is no DRAM or DMA. One descriptor's X, W and OUT must fit in the
  1.5 MB SRAM, so larger layers are run as several descriptors by the host.
- **PE register files.** They total 196 B instead of the paper's 224 B per PE. The paper
  gives the total but not the split.

## Verification

Every module has a self-checking testbench in `tb/` that compares against an independent
model and prints `TB_RESULT checks=<n> failures=<n>`.

`tb_sparqle_top` runs the top at its default size (16 x 16 array, 1.5 MB SRAM). The layer is
40 tokens x 256 x 256, so the last token tile is half full. Activations are random and near
zero, and one token lies entirely in [0,15]. The test:

- checks every output value;
- checks the exact dense-pass and sparse-pass cycle counts;
- fails if any of these mechanisms never occurred: a skipped sparse pass, an MSB4-free group,
  a clip, a saturation, a bank conflict, a load/compute overlap;
- checks that guard lines placed just after the output survive, so rows past `M` are not
  written;
- runs a second layer in Int4-activation mode and checks its outputs, its dense cycle count,
  and that no sparse round ran.

To simulate a block with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl rtl/sparqle_pkg.sv \
        tb/tb_sparqle_top.sv --top-module tb_sparqle_top -Mdir obj_top
    ./obj_top/Vtb_sparqle_top

Other blocks work the same way with their `tb_<module>.sv`. Modules are found in `rtl/`
through `-Irtl`. The layer size is set by the `localparam`s at the top of
`tb_sparqle_top.sv`. The shift and clip constants are set where that file fills in the
descriptor. The end-to-end run takes a few seconds.

## Parameters

| name | value | meaning |
|---|---|---|
| `N_ROWS x N_COLS` | 16 x 16 | PE array |
| `MACS` | 8 | Int4 x Int4 MACs per PE |
| `KT` | 32 | input channels per group |
| `OCS` | 8 | output channels per PE |
| `NT_CH` | 128 | output channels per tile |
| `SRAM_BYTES` | 1.5 MB | 16 banks, 16 B lines, 98304 lines |
| `CB_DEPTH` | 8 | circular-buffer lines per load path |
| `MAX_CH` | 16384 | channels covered by the importance mask |

The array size and MAC count follow the paper's 2048-MAC configuration. The SRAM size is
also the paper's. `KT`, `OCS`, `NT_CH` and `CB_DEPTH` are this design's choices.
