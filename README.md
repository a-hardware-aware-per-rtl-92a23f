# SOP: a scaled-outer-product matrix unit for block-quantised LLM layers

Weights of a large language model can be stored in 4 to 6 bits per value if
every block of g = 16 consecutive weights along the contracted dimension K
shares one scale factor. A layer then computes

    Y[t,m] = sum over K-blocks b of  s_X[t,b] * s_W[m,b] * sum_{r<g} Q_X[t,bg+r] * Q_W[m,bg+r]

where Q are small quantised values and s are the per-block scales. The
inner sum does not involve any scale. This unit uses that fact. A
T_R x M_R array (128 x 128 by default) runs the inner sum as g rank-1
outer products of quantised operands, using narrow integer multipliers. At
the end of each K-block it multiplies the finished T_R x M_R partial tile
once by the rank-1 "scale tile" s_X[:,b] (outer) s_W[:,b] and adds the
result to the output. Scales are loaded once per K-block, so they cost a
factor g less bandwidth than operands. At 128 x 128, g = 16 and 12-bit
scales over 4-bit operands they are about 16 % of operand traffic.

On top of this core the unit supports three more features:

* **Per-layer codebooks in pairs.** Weights are n-bit codes (n = 4 or 5)
  that index one of two per-layer look-up tables (FMTa, FMTb). A metabit
  in each block's scale word picks the table for that block.
* **Signed, metabit-carrying scale words.** A 12-bit scale word holds a
  sign, an exponent, a mantissa and one or more metabits. The layout is
  chosen per layer.
* **Sparse corrections.** Outlier weights removed before quantisation
  (OPQ) and the largest remaining errors (Wr) are added back as sparse
  `v * X[t,k]` terms. These are applied in step with the K traversal.

The RTL is SystemVerilog-2017 in `rtl/`, with self-checking testbenches in
`tb/`.

## Number formats

### HIF7 and HIF8 operands

The array never multiplies general floating-point numbers. A weight is a
**HIF7** value and an activation is a **HIF8** value. Each is a 5-bit two's
complement coefficient times a power of two:

| format | use | coefficient | shift | distinct values | max / min nonzero |
|---|---|---|---|---|---|
| HIF7 | weights (LUT output) | -16..15 | 0..3 | 80 | 120 |
| HIF8 | activations | -16..15 | 0..4 | 96 | 240 |

So a product is `(wtc5 * atc5) << (wsa + asa)`: a 5x5-bit multiply and a
shift of 0..7. With the `EXT_ASA` parameter, activation shifts 5..7 are
also accepted, and the shifter then covers 0..10. Without it, an
activation with a shift above 4 is clamped to 4 and `act_err` is set.

Both formats travel in an 8-bit container, `{shift[2:0], coef[4:0]}`. For
weights, bit 7 is ignored. E2M3 (FP6) values are HIF7 values up to a
factor of 8: the subnormals 1/8..7/8 and the normals up to 7.5 become
coefficients 1..15 with shifts 0..2. The factor of 8 is folded into the
block scale, so FP6 layers run on the same datapath.

### Scale words (SwExMy in 12 bits)

A scale word is `SwExMy`: w sign bits (0 or 1), x exponent bits and
y mantissa bits. The remaining m = 12 - w - x - y bits are metabits. The
format is set per layer at run time (`fmt_x`, `fmt_w`) and placed as
follows:

* If w = 1, bit 11 is the sign and the metabits are the lowest m bits.
* If w = 0 and m >= 1, bit 11 is the first metabit and the others are the
  lowest m - 1 bits.
* The exponent and then the mantissa fill the bits in between.

| format | layout, bit 11 to bit 0 | use |
|---|---|---|
| S1E5M5 | `s eeeee mmmmm u` | recommended native format: sign and codebook metabit |
| E5M6 | `s eeeeee mmmmmm`, no metabit | |
| S0E6M5 | `u eeeeee mmmmm` | metabit, no sign |
| S1E5M4 | `s eeeee mmmm u u` | two metabits |
| UE4M4 (8-bit) | `u eeee mmmm u u u` | FP6-tier scale, padded into 12 bits |

The decoder in `scale_decode` uses these rules:

* The exponent bias is 2^(x-1) - 1.
* An exponent field of 0 is subnormal.
* No code is reserved for infinity or NaN.
* `meta[0]` is the codebook select. For a signed scale it is the highest
  of the low metabits (bit 0 for S1E5M5). For an unsigned scale it is
  bit 11.

The sign makes two codebooks out of one: an asymmetric codebook such as
NF4, multiplied by a negative scale, becomes its mirror image.

**Per-layer exponent shift (F_layer).** Before quantisation, all of a
layer's block scales may be multiplied by 2^k, with k chosen per layer so
that the scales land in the format's normal range. The unit undoes this
by subtracting `k_x` and `k_w` (8-bit signed, set per layer) from the
decoded exponents.

### Output accumulator Y

Y is a YW-bit (64) two's complement fixed-point number with YFRAC (24)
fraction bits. It saturates at both ends, and a saturating tile sets the
sticky `ovf` flag. Each scaled block sum is shifted into this format and
rounded toward minus infinity, and so is each sparse term. The result is
exactly reproducible by integer arithmetic; `tb/sop_ref_pkg.sv` is such a
model.

## The processing element (`sop_pe`)

Every output position holds three registers:

* `iacc`: the block accumulator, 21 bits at g = 16. It collects one
  shifted product per accepted operand beat. The worst case is
  16 x 256 x 2^7 = 2^19.
* `hold`: on the block's last beat, `iacc + p` moves here and `iacc`
  restarts at zero. The next block can therefore start on the very next
  cycle.
* `y`: one cycle after the last beat (`apply`), `hold` is multiplied by
  the position's element of the scale tile and added in. That element is
  `sig_row * sig_col`, with sign `sign_row ^ sign_col` and exponent
  `exp_row + exp_col`. A sparse term for this column can be added in the
  same cycle.

Timing for one K-block of g beats, with no stalls:

    cycle      0 .. g-1          g                g+1 ..
    beats      r = 0 .. g-1      next block r=0   ...
    iacc       accumulates       (restarted)      next block
    hold       -                 = block sum      
    Y          -                 += hold*scale    (apply for block 0)

The scale significands are 9 bits (hidden bit plus up to 8 mantissa bits),
so the scale product is an 18-bit multiply per position. The shift to Y
is a barrel shift of the 39-bit product.

## Scale lanes (`scale_lane`)

There is one lane per row (activation scale) and one per column (weight
scale). On the first beat of a block the lane decodes the scale word on
`sx`/`sw`. The decoded scale is visible in the same cycle, because the
weight LUT needs the metabit at once, and is registered for the rest of
the block. On the block's last beat it is copied to a `retire` register,
which the PEs use for `apply` while the next block is already issuing.
The column lanes also add YFRAC to their exponents, so the PE's shift
amount is simply `exp_row + exp_col`.

## Weight LUTs (`lut_pair`)

Each of the M_R weight lanes holds two 32 x 8-bit LUTs, one per codebook
of the pair, so the 128-lane unit holds 256 of them. They are loaded
through a single write port before a layer runs. `lut_wr_bcast` writes
every lane at once; otherwise `lut_wr_lane` selects one lane. The LUTs
are read combinationally: code (masked to `n_bits`) plus metabit gives
the HIF7 weight. Here they are flip-flop arrays; a dense compute-in-memory
SRAM would be the area-efficient choice.

In **direct mode** (`w_direct = 1`) the LUTs are bypassed and `qw` carries
HIF7 bytes. Layers stored as FP6 (E2M3, 6-bit codes) or as HIF7 need this
mode, because their codes do not fit a 32-entry table.

## Sparse corrections (`sparse_corr`)

An entry is `{k[15:0], col[7:0], is_wr, value[15:0]}`:

* `k` is the element index along K within the tile.
* `col` is the output column.
* `value` is BF16 for an OPQ outlier, or E3M4 in the low byte for a Wr
  residual. E3M4 uses bias 3 and is subnormal at exponent 0.

The entry adds `v * X[t,k]` to column `col` of every row t. X[t,k] is
rebuilt from the same operands the array is using at that moment: the
HIF8 code on `qx` and the row scale of the current block. The product is
a 5 x 9 x 8-bit multiply per row, shifted into Y's format.

**Lock-step schedule.** Entries must arrive sorted by k, and `n_sparse`
gives their number for the tile. The unit keeps the next entry in a head
register and uses the stream port as a one-entry look-ahead. When the
operand beat on the bus has the head's k, the head is applied. The beat is
held on the bus (`hold`, so `beat_ready` is low) while another entry for
the same k follows, or while the look-ahead is not yet known. So k steps
with no entries or one entry cost nothing, and each extra entry at the
same k costs one cycle. At the typical rates (about 0.3 % OPQ and 0.1 %
Wr, or roughly 0.5 entries per k step over 128 columns), the slowdown
comes only from collisions. An entry whose k has already passed is
dropped and sets `sp_order_err`. Each applied term reaches Y one cycle
after it fires, together with that cycle's `apply`.

## Sequencer and top-level use (`sop_ctrl`, `sop_top`)

`sop_ctrl` runs the two loops: in-block step r = 0..G-1 and K-block
b = 0..n_kblk-1. It accepts a beat when `beat_valid` is high and the
sparse unit is not holding. It raises `apply` one cycle after each
block's last beat. Without holds, a tile takes `n_kblk * G` beat cycles
plus one draining cycle. `done` rises two cycles after the last beat and
stays high until the next `start`. `cyc_count` and `hold_count` report
busy cycles and held cycles.

To run one tile:

1. Load the codebooks (`lut_wr_*`). Set `fmt_x`, `fmt_w`, `n_bits`,
   `w_direct`, `k_x`, `k_w`, `n_kblk` and `n_sparse`. Keep them stable
   while `busy`.
2. Pulse `start`. This clears Y and all accumulators.
3. Present `n_kblk * G` beats. Each beat carries one column of K: T_R
   HIF8 activations on `qx` and M_R weight codes on `qw`. The first beat
   of each K-block also carries the block's scale words on `sx` (T_R)
   and `sw` (M_R); on other beats these are ignored. In parallel, stream
   the tile's sparse entries on `sp_*`.
4. When `done` is high, read Y one row at a time: drive `rd_row` and read
   `rd_y[M_R]` in the same cycle.
5. Check the status flags: `ovf` (Y saturated), `act_err` (activation
   shift clamped), `fmt_err` (a scale format does not fit 12 bits),
   `sp_order_err` and `sp_sat_err`.

Tiles do not overlap: Y must be read before the next `start`. Caching,
tiling and operand memories sit outside the unit.

| parameter | default | meaning |
|---|---|---|
| `T_R` | 128 | tokens per tile (rows) |
| `M_R` | 128 | output features per tile (columns) |
| `G` | 16 | block size g |
| `YW` | 64 | output accumulator width |
| `YFRAC` | 24 | fraction bits of Y |
| `EXT_ASA` | 0 | allow activation shifts 5..7 |

## What follows the source design, and what was chosen here

Taken from the published design:

* the scaled-outer-product micro-kernel and the 128 x 128 array;
* g = 16 and the HIF7/HIF8 shift-product MAC with its asymmetric shift
  ranges and the optional extended activation range;
* 32 x 8 LUTs holding codebook pairs selected by a per-block metabit;
* the SwExMy 12-bit scale word with its bit placement;
* the per-layer F_layer exponent shift;
* OPQ entries as an index plus BF16, Wr entries as an index plus E3M4,
  both applied in step with the K traversal.

Chosen here, because the source says nothing about them:

* the number format, width, rounding and saturation of Y;
* the one-cycle apply pipeline;
* the HIF container bit layout;
* which signed metabit is the codebook select;
* the exponent bias, subnormals and absence of inf/NaN in scale words,
  and the E3M4 bias;
* the split of the 256 LUTs into 128 lanes x 2;
* activations entering as HIF8 with no LUT of their own;
* the sparse entry layout and its stall-based schedule;
* all handshakes, the readout port, reset (asynchronous, active low) and
  the status flags;
* direct HIF7 mode as the way E2M3 layers are run.

Not built:

* the compute-in-memory SRAM that would host the LUTs;
* the memory system that tiles a GEMM onto the unit;
* the offline quantisation flow that produces codebooks, scales and
  sparse lists: calibration, codebook pair search, promotion and
  knapsack allocation.

Formats that this datapath cannot run, because their values fall outside
HIF7:

* 16-bit (E8M7) scales;
* n = 6 codebooks through the LUTs (they can use direct mode);
* FP8-class weights (E4M3, E3M4, E2M5), which the source only compares
  against.

## Simulating

Every testbench checks against its own exact model and ends with a
`TB_RESULT checks=N failures=M` line. With plain Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl +libext+.sv \
        rtl/sop_pkg.sv tb/sop_ref_pkg.sv tb/tb_sop_top.sv --top-module tb_sop_top
    ./obj_dir/Vtb_sop_top

| testbench | what it checks |
|---|---|
| `tb_scale_decode` | seven scale layouts, random fields: value, sign and metabits |
| `tb_scale_lane` | same-cycle decode, per-block hold, retire copy, F_layer shift |
| `tb_lut_pair` | both LUTs, n = 4 and 5 masking, direct mode |
| `tb_sop_pe` | block MAC, scale-and-accumulate against the integer model, clear, saturation |
| `tb_sparse_corr` | random sorted entries (BF16 and E3M4), per-row values, exact stall count |
| `tb_sop_ctrl` | loop counts, first/last marks, apply timing, done latency, hold counter |
| `tb_sop_top` | whole unit at 4 x 3, g = 4, against the model of the block-scaled GEMM |
| `tb_sop_fp6_layer` | FP6 layer: E2M3 weights in direct mode with UE4M4 scales, g = 16, K = 4096 and K = 14336, on a 4 x 4 tile |

`tb_sop_top` runs 12 tiles. They cover random S1E5M5 scales with both
signs and both metabits, n = 4, n = 5 and direct weights, nonzero F_layer
shifts, OPQ and Wr entries with stalls, a saturating tile and a tile with
clamped activations. It counts each of these features and fails if one
never occurred. It also checks that a stall-free tile takes
`n_kblk * G + 1` cycles.

The shared stimulus (`tb/sop_top_tb_body.svh`) works at any size. To run
a larger array, change `T_R`, `M_R` and `G` in `tb_sop_top.sv`. The body
has passed at 32 x 32 and 64 x 64 with g = 16. The 64 x 64 run made
12,308 checks with no failures.

The largest array simulated is 64 x 64. The default 128 x 128 array
passes lint and elaborates, but it has not been simulated. Verilator's
build cost grows with the PE count: at 64 x 64 it took about 6 minutes and
5.7 GB, so 128 x 128 needs about 25 minutes and 23 GB before the first
cycle. The simulation itself is short: a few thousand cycles, under a
second at 64 x 64.
