# VTR accelerator: a head-parallel matrix engine for a small Vision Transformer

This design is an accelerator for inference of a compact Vision Transformer used for
Synthetic Aperture Radar (SAR) automatic target recognition. The transformer follows the
"shifted patch tokenisation + locality self-attention" recipe. Image shifting and
tokenisation stay on a host processor. The accelerator does everything after that:
layer norms, linear layers, attention with a masked diagonal and a learned temperature,
and the MLP.

The main idea is that a transformer layer is almost entirely matrix products. Those
products split naturally along the attention heads. The hardware therefore has two
engines:

* **HPPU** (highly parallel processing unit). It does dense block-wise matrix
  multiplication (DBMM) in `p_h` head compute units (HCUs) that work side by side, one
  attention head each. A linear layer has no heads of its own. Its output columns are
  split into `p_h` "fictitious heads" so that all HCUs still have work.
* **ECU** (element-wise compute unit). It has the same arrangement as the HPPU but does
  element-wise work instead of dot products: `R = f(A * B + C)` per element. `f` is
  identity, GELU, exp, reciprocal or 1/sqrt. It can also force the diagonal of an
  attention matrix to a large negative value.

Softmax and layer norm are split across the two engines. Sums over a row are DBMMs
against a matrix of ones on the HPPU. Scaling, exponentiation and normalisation run on
the ECU.

The default configuration is the one the design was sized for:

| Parameter | Default | Meaning |
|---|---|---|
| `P_H` | 4 | head compute units; one per FPGA die region in the original target |
| `P_T` | 12 | PE rows per HCU (token axis) |
| `P_C` | 2 | PE columns per HCU (embedding axis) |
| `P_PE` | 8 | each PE is a `P_PE x P_PE` systolic array; also the block size `b` |

At these defaults there are 4 x 12 x 2 = 96 PEs and 6144 multiply-accumulate cells. The
ECU also has 96 element-wise PEs of 8 x 8 elements.

## Number format

Every element is 16-bit two's-complement fixed point with 8 fraction bits (Q8.8). The
range is -128 to +127.996 and the step is 1/256.

* Products are accumulated at 44 bits, so a dot product of any length the buffers can
  hold cannot overflow.
* Results are re-quantised to Q8.8 on the way out of the HCUs: shift right by 8, then
  saturate.
* The ECU computes `A * B` at full width, shifts by 8, adds `C`, saturates, and then
  applies `f`.

This format is a design choice. The original design was written in a high-level
synthesis flow and does not state its precision. Q8.8 is adequate for the attention
test in `tb_vtr_accel`, which shows an error of 0.03 against real arithmetic. It is
coarse for softmax over many tokens, though: with about 250 tokens a probability is only
a few LSBs. Widening `FRAC`/`DW` in `vtr_pkg` is the first thing to change for
production use. The function tables scale with it, but their interpolation code assumes
8 fraction bits.

## How a matrix product maps onto the array

DBMM works on `b x b` blocks, with `b = P_PE = 8`.

* The left matrix (M rows x K) is held row-block by row-block: PE row `t` owns rows
  `t*P_PE .. t*P_PE+7` of the current m-tile.
* The right matrix (K x N) is held column-block by column-block.
* A **tile** is what one HCU computes in one pass:
  * `P_T*P_PE = 96` output rows by `P_C*P_PE = 16` output columns;
  * that is `P_T x P_C = 24` output blocks, one per PE.
* A product of `MT x NT` tiles is walked with the m-tile index outer and the n-tile
  index inner.

### Buffer layouts

These are the layouts a host must follow.

**GIB and LIB (left operand)**
* Each has `P_T` banks of 2048 words. A word is `P_PE` elements.
* Bank `t`, word `mt*K + k`, holds column `k` of the `P_PE` rows that PE row `t` owns in
  m-tile `mt`. In other words, rows `(mt*P_T + t)*P_PE + i`, i = 0..7.
* A head's LIB must therefore hold `MT*K <= 2048` words.

**Weight buffer (right operand)**
* Each HCU has a local weight buffer with `P_C` banks of 2048 words.
* Bank `c`, word `nt*K + k`, holds row `k` of the columns `(nt*P_C + c)*P_PE + j`.
* This requires `NT*K <= 2048`.

**GOB (results)**
* One bank per head, 2048 blocks of `P_PE x P_PE`.
* The result of tile `(mt, nt)` in PE `(t, c)` is stored at block address
  `(mt*NT + nt)*P_T*P_C + t*P_C + c`.

**ECU operand and result buffers**
* There are four: A, B, C and R.
* Each has one bank per ECU PE and 64 blocks per bank.
* Bank `(h*P_T + t)*P_C + c`, address `mt*NT + nt`, holds the same block that the GOB
  holds for head `h` at `(mt*NT + nt)*24 + t*P_C + c`.
* An HPPU result can therefore be moved into the ECU block for block, with no
  reshuffling.

### Within one PE

The PE is output stationary.

* In each cycle it takes one column of its A row-block and one row of its B
  column-block.
* Row `i` of A is delayed `i` cycles before entering from the left. Column `j` of B is
  delayed `j` cycles before entering from the top.
* Cell `(i, j)` multiplies the pair passing through, adds the product to its
  accumulator, and forwards A to the right and B downward.
* `valid`, `first` and `last` flags travel with the data:
  * a cell restarts its sum on `first`;
  * the bottom-right cell seeing `last` means the whole block is complete.
* Latency: the block completes `K + 2*P_PE - 2` clock edges after the edge that takes
  the first vector.

### Tile schedule and the output stall

For each tile the controller issues `K` reads. Every HCU reads the same LIB and weight
addresses in lock-step; each HCU reads its own data. After `2*P_PE` further cycles the
PEs are done.

* The controller then **captures** all 24 accumulators into that HCU's local output
  buffer (LOB), re-quantising them, and starts the next tile at once.
* The LOB streams its 24 blocks to the GOB, one per cycle, while the next tile
  computes.
* If the next tile finishes before the stream ends (`K + 2*P_PE < 24`, i.e. `K < 8` at
  defaults), the capture waits. The top's `hppu_stall` output shows this.
* Without a stall, a DBMM of `T` tiles takes about `T*(K + 2*P_PE) + 24 + 2` cycles.

## The element-wise unit

An `OP_ECU` command walks `MT x NT` tiles, one per cycle. In each cycle every ECU PE
reads the block at the tile address from A, B and C and computes
`R = f(sat((A*B) >> 8) + C)` per element. R is written two cycles later. Each element
is one multiplier, one adder, a saturation and the function unit; there is no
accumulation.

**Diagonal mask (locality self-attention).** With `mask_diag` set, the unit forces
element `(i, i)` to -128.0 in every block whose block row equals its block column. The
mask is applied after the scaling `A*B + C` and before `f`, so `exp` turns it into 0.
The sequencer keeps the block row and block column of the current tile, so the host
supplies no mask data.

**Functions.** All are piecewise-linear interpolations between table points. The
formulas behind each table are in `vtr_pkg`.

| `func` | Result | Method and limits |
|---|---|---|
| `F_NONE` | `y = x` | |
| `F_GELU` | `y = x * Phi(x)` | 32 segments on [-4, 4); `y = x` above and `y = 0` below that range |
| `F_EXP` | `e^x` | computed as `2^(x log2 e)`: the integer part is a shift, the fraction uses a 16-segment table. Saturates above about 4.85; underflows to 0 below about -6.2 |
| `F_RECIP` | `1/x` | leading-one normalisation to `1.f * 2^p`, then a 16-segment table of `1/(1.f)` |
| `F_RSQRT` | `1/sqrt(x)` | as for `F_RECIP`, with separate tables for even and odd `p` |

Accuracy is within a few LSBs or 1 %. Reciprocal and 1/sqrt are additions of this
design: softmax normalisation and the layer-norm `1/sigma` need them, and the original
names only GELU and exp.

## Commands

The top, `vtr_accel`, executes one command at a time.

**Handshake.** A command is offered with `cmd_valid` and accepted when `cmd_ready` is
high; `cmd_ready` means both engines are idle. `done` pulses when a command ends. The
command type `cmd_t` is defined in `vtr_pkg`.

| `op` | Fields used | Action |
|---|---|---|
| `OP_LIB_LOAD` | `base`, `len`, `head_mask` | copy GIB words `base..base+len-1` into LIB words `0..len-1` of the HCUs selected by the mask. All ones broadcasts, e.g. one input for all fictitious heads; one bit loads a per-head operand such as `Q_i`. Takes `len + 2` cycles |
| `OP_DBMM` | `len` (K), `m_tiles`, `n_tiles` | the tiled product in every HCU, results in the GOB from block 0 |
| `OP_ECU` | `m_tiles`, `n_tiles`, `func`, `mask_diag` | element-wise pass over the ECU buffers |

**Host data ports.** The host writes the GIB (`gib_*`, one bank word per cycle), the
weight buffers (`wb_*`) and the ECU operands (`ecu_w*`, one block per cycle). It reads
the GOB (`gob_*`) and the ECU result (`ecu_r*`), both with one-cycle latency. These
ports stand for the link to the FPGA's external memory. Buffers may only be written
while no command runs; an assertion checks this.

### One attention head as a command sequence

This is what `tb_vtr_accel` does per head; all heads run together.

1. Write `Q_i` to the GIB, `K_i^T` to head `i`'s weights. Issue `OP_LIB_LOAD` with one
   mask bit per head, then `OP_DBMM`: the GOB now holds `A_i = Q_i K_i^T`.
2. Copy the `A_i` blocks into ECU buffer A. Fill B with `1/lambda`, the learned
   temperature. Fill C with 0, or with -128 for padding columns so that padding tokens
   get no weight. Issue `OP_ECU` with `F_EXP` and `mask_diag`.
3. Load the exponentials as the left operand and a matrix of ones as the right. A DBMM
   gives the row sums.
4. `F_RECIP` on the sums. Then `F_NONE` with B = the reciprocal of each row, which
   normalises the rows.
5. Load the normalised scores and `V_i`. A DBMM gives the head output.

Layer norm follows the same pattern:
* sums of `x` and `x^2` via DBMM with ones;
* `F_RSQRT` for `1/sigma`;
* one `F_NONE` pass `(X - mu) * (gamma/sigma) + beta`, with `C` carrying the shift.

The host computes the small per-row vectors in between. The host, or a small sequencer
that is not part of this RTL, is responsible for:
* forming B and C;
* the copies between GOB, ECU and GIB;
* residual additions (an `F_NONE` pass with B = 1 and C = the residual);
* the class-token and positional-embedding concatenation.

## Sizes the defaults support

Token count `N` includes the class token. A patch of `P x P` over 5 images (the
original plus four shifted copies) gives an embedding of `5*P^2`.

| Configuration | N | Raw embedding | Largest need | Fits |
|---|---|---|---|---|
| 88x88, patch 8 | 122 | 320 | LIB 640 words; QK^T 16 ECU tiles | yes |
| 88x88, patch 11 | 65 | 605 | weights 1210 words | yes |
| 128x128, patch 8 | 257 | 320 | QK^T 51 of 64 ECU tiles; GOB 1224 of 2048 blocks | yes |
| 128x128, patch 16 | 65 | 1280 | LIB/weights 1280 words | yes |

The image and patch sizes, hidden sizes (44, 88, 96, 48) and 2 or 4 heads are the
evaluated configurations. The token counts and buffer needs are derived here.

The MLP hidden size was not available. The design fits any MLP hidden size up to 2048,
which is the inner dimension of the second layer.

Buffer depths are set by these cases: 2048 words for GIB, LIB, weights and GOB, and 64
tiles for the ECU. Both are parameters.

## Where this departs from the original design, and what is missing

**From the original architecture:**
* the HPPU/ECU split;
* the HCU/PE/systolic-array hierarchy and its four sizes;
* the global/local input buffers, per-HCU weight buffers, local and global output
  buffers, and the controller;
* block-wise storage (left operand by rows, right by columns);
* the ECU's `f(A*B+C)` with GELU and exp, built the same way as the HPPU with four
  buffers;
* broadcast versus per-head input loads;
* the diagonal mask applied after scaling;
* the product with ones used for sums.

**This design's own choices:**
* the Q8.8 format;
* block size fixed at 8 (a larger `b` is several 8 x 8 tiles);
* the output-stationary dataflow and skew;
* all buffer layouts and depths;
* the command set and handshake;
* the serial LOB-to-GOB stream and its stall;
* the function approximations and the two extra functions;
* one command at a time.

The original tool flow (high-level synthesis at 300 MHz) says nothing at this level, so
none of the cycle counts above can be compared with it.

**Not built:**
* the host processor (shifting and tokenisation);
* the host and FPGA external memories;
* any DMA between them and the buffers. The top exposes plain buffer write and read
  ports where that traffic would connect.
* an on-chip layer sequencer. Command sequences are issued from outside.

## Files

`rtl/` holds one module or package per file:

| Group | Files |
|---|---|
| Package | `vtr_pkg` (types, commands, function tables) |
| HPPU | `ce` (MAC cell), `pe` (systolic array with skew), `lib`, `weight_buffer`, `lob`, `hcu` (LIB + PE grid + LOB), `gib`, `gob`, `hppu_ctrl`, `hppu` |
| ECU | `ecu_func` (function unit), `ecu_pe`, `ecu` |
| Top | `vtr_accel` |

`tb/` holds a self-checking testbench per module, plus `ecu_ref_pkg`, which holds the
real-valued reference functions and their tolerance. Each testbench ends by printing
`TB_RESULT checks=N failures=M`.

* `tb_vtr_accel` runs the whole attention head above at a reduced size: 2 heads of 4 x 2
  PEs of 2 x 2. It counts that every mechanism occurred: broadcast and per-head loads,
  multi-tile DBMM, the output stall, commands waiting on `cmd_ready`, the diagonal mask,
  and every ECU function.
* `tb_vtr_full` runs the same sequence on `vtr_accel` with no parameter overrides. Its
  C++ build takes about 11 minutes with four parallel build jobs, and more than 10 minutes
  with two. The simulation itself takes about 20 s and passes 45 checks. The largest size
  simulated is therefore the full default size, given enough build time.

To simulate, for example:

    verilator --binary --timing --assert -Wno-fatal -Irtl rtl/vtr_pkg.sv rtl/*.sv \
        tb/ecu_ref_pkg.sv tb/tb_vtr_accel.sv --top-module tb_vtr_accel
    ./obj_dir/Vtb_vtr_accel

`vtr_pkg.sv` must come first. `-Wno-fatal` keeps lint warnings from stopping the build:
unused bits of the parameterised arrays, for example, are reported but harmless.
