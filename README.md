# Memoized incremental training of learned-index linear models: an accelerator in SystemVerilog

String-key learned indexes place keys with linear models. Each model is
fitted by least squares, `beta = (X^T X)^-1 X^T Y`, where each row of `X` is one
key (one column per byte). The number of columns `p` is the key length. Retraining
normally factorises the whole key matrix again every time keys are inserted. The
idea behind this accelerator is that the upper-triangular factor `R` of a QR
decomposition `X = QR` is all that least squares needs, because
`X^T X = R^T R`. `R` is only `p x p`, so it can be kept per model. When new
keys `X_delta` arrive, they do not have to be combined with all the old keys.
Factorise `X_delta` alone, stack its factor under the stored `R_old`, and
factorise that `2p x p` matrix once more. The result is exactly the `R` of
all the keys:

    R_new = QR( [ R_old ; QR(X_delta) ] )

The hardware does that QR work. It then turns `R_new` into `M = R^-1 R^-T`,
so the host obtains `beta = M (X^T Y)` with one matrix-vector product, which
stays on the host.

The RTL models the whole accelerator:

- a controller that takes jobs from the host;
- a DMA engine to board DRAM, where staged keys and one memoized `R` per model live;
- several training engines, each with a scratchpad, a QR unit made of Householder processing units, and a systolic-array matrix engine.

The defaults are the evaluated configuration:

- key length `P = 96`;
- 4 training engines;
- 2 processing units per engine;
- 3 inner-loop PEs per processing unit.

## Numbers

Every matrix element is a signed 64-bit fixed-point value, Q31.32 (`fx_t` in
`sia_pkg`). The 64 bits match the 8-byte elements of a 96 x 96 `R`, which
takes 72 KB. The fraction split is this design's choice. Keys are bytes, so
data enters as small integers.

Dot products accumulate full 128-bit products in a Q63.64 accumulator
(`acc_t`) and are rounded back only at the end. A multiply `fx_mul`
truncates toward minus infinity.

Householder's `gamma = -2 / dot(ref, ref)` has a huge dynamic range: `dot` can
be anywhere from 2^-64 to 2^63. A Q31.32 value would underflow, so `gamma` is
kept as a normalised reciprocal:

    D     = dot(ref, ref)            (128-bit Q63.64)
    lz    = leading zeros of D
    recip = floor(2^191 / (D << lz))   (2^63 < recip <= 2^64, 65 bits)
    gamma = -recip * 2^(lz - 126)

The inner loop PE computes `alpha = gamma * dot(ref, col)` as
`-((recip * dot) >>> (158 - lz))`, using a 200-bit product. An all-zero
column segment gives `D = 0`. The outer PE then raises `g_skip`, and the
columns are left as they are. This happens whenever keys are shorter than
`P`, because unused byte columns are zero.

## One training job, end to end

1. **Host.** The host writes the new key rows into board DRAM. Each DRAM
   word is one row of `P` elements. It then writes a job through `cmd_*`:
   - the model id `mid`;
   - the mode, cold or incremental;
   - the row count (1 to `XROWS` = 768);
   - the DRAM address of the rows.

   The job is accepted when an engine is idle. `cmd_te` reports the
   lowest-numbered idle engine, which takes it.
2. **DMA load** (`dma_controller`). The DMA copies the rows into the
   engine's scratchpad X region. For an incremental job it also copies the
   model's memoized `R_old` (DRAM words `mid*P .. mid*P+P-1`) into the
   scratchpad R region. There is one DRAM request at a time:
   `req`/`gnt`, then read data with `rvalid`.
3. **QR unit** (`qrd_unit`). This step has up to four phases:
   - **Tiles.** `X_delta` is cut into tiles of `2P` = 192 rows. The processing
     units factor up to `NUM_PU` tiles at once, in rounds, and each `P x P`
     factor goes to a scratchpad slot.
   - **Reduction.** While more than one factor is left, pairs of slots are
     stacked into one processing unit and factorised again, in place. This is
     the tree that makes QR of a tall, skinny matrix parallel. An odd factor
     left over at a level is passed through a processing unit on its own. That
     keeps every slot triangular and keeps the control uniform.
   - **Memo.** For an incremental job, `concat(R_old, R_delta)` is factorised
     into the R region.
   - **Copy.** For a cold job, the single remaining factor is copied to the
     R region.
4. **Matrix engine** (`matrix_engine`). `P` cycles copy `R_new` from the
   scratchpad into the matrix engine. The engine inverts it and forms
   `M = R^-1 R^-T`.
5. **DMA store.** The R region is written back over the model's `R_old` in
   DRAM. Stores take priority over loads.
6. **Done.** `te_done_flag[te]` rises. The host reads `M` row by row through
   `hm_te`, `hm_idx` and `hm_row`, then clears the flag with `done_ack[te]`.

Engines run concurrently. Only the DMA is shared.

Deleted keys stay folded into a model's memoized `R` until the host chooses to
retrain that model cold. A cold job ignores the stored `R_old` and overwrites
it. A cold retraining over more than 768 keys is issued as one cold job
followed by incremental jobs on the same model.

Scratchpad rows, in order: X region (`XROWS` rows), R region (`P` rows), then
`NSLOT = ceil(XROWS / 2P)` factor slots of `P` rows each. That is 768 + 96 +
4 x 96 = 1248 rows of 96 x 64 bits per engine.

## The Householder processing unit

`qrd_pu` factorises the up-to-`2P x P` matrix in its matrix buffer `mbuf`.
The buffer is stored by column, so a column is streamed `LANES` rows per cycle.
For each column `i`:

- **Outer loop PE** (`outer_loop_pe`). It streams column `i` once. In that
  pass it accumulates `dot(col, col)` from row `i` down and copies the
  masked column into the reflector buffer. It then computes
  `d = sqrt(dot)`, using a bit-serial square root of 64 cycles, and sets
  `ref_i = x_i + sign(x_i) d`, written as one element.
  `dot(ref, ref)` follows in closed form as `dot(col,col) - x_i^2 + ref_i^2`,
  which saves a second pass. `gamma` comes from a restoring divider of 192
  cycles.
- **Inner loop PEs** (`inner_loop_pe`, `N_INNER` of them). Each takes one
  column `j >= i`. It makes a dot pass to get `alpha`, then an axpy pass
  that writes `col_j + alpha * ref` back, and it captures `R[i][j]`.
  Columns are handed out `N_INNER` at a time. A column takes
  `2 * ceil(rows / LANES) + 2` cycles.
- **R matrix buffer.** `R[i][j]` goes into `rbuf`. Entries below the
  diagonal are zero.

Each column `i` runs to `min(P, m) - 1`. The textbook loop stops at
`n - 2`, which is enough only for a square input. Here the last column must
also be reflected, because rows lie below it. The unit is serial in `i`, as
Householder QR is; the parallelism is in the lanes, in the inner PEs, and in
the processing units.

## The inverse: Heller's recursive doubling on a systolic array

Inverting a triangular matrix row by row is serial. Heller's scheme instead
doubles the size of the solved diagonal blocks at each level, using only
matrix products. In `matrix_engine`, the steps are:

    Inv = diag(1 / r_dd)                      (P divisions, 2^64/|r|)
    for b = 1, 2, 4, ... < P:
        B_b = entries of R in the upper-right b x b block of every
              aligned 2b x 2b diagonal block (zero elsewhere)
        T1  = Inv x B_b
        T2  = T1  x Inv
        Inv = Inv - T2                        (one row per cycle)
    M = Inv x Inv^T

Every level applies `[A B; 0 C]^-1 = [A^-1, -A^-1 B C^-1; 0, C^-1]` to all
`2b` blocks at once. `B_b` is never stored; it is selected by address while
the operands are fetched.

All products run on `systolic_array`, an `S x S` output-stationary array with
`S = 8`. The `PP x PP` operands (`PP` is `P` rounded up to a multiple of
`S`) are cut into `S x S` output tiles. Each tile streams `PP + 2S - 2`
skewed vectors, then is written back in one cycle.

The transpose for the last product needs no hardware of its own. The operand
path reads `Inv[c][k]` where it would read `B[k][c]`.

Latency is about `2 + 67P + (2L + 1) NT^2 (PP + 2S) + L * PP` cycles, with
`NT = PP / S` and `L = ceil(log2 P)` levels. At the defaults this is about
249,000 cycles. A zero diagonal entry of `R` saturates its reciprocal.

## Measured timing at the default size

The full-size simulation runs two jobs on one engine with `P = 96` and random
byte keys:

| job | new rows | cycles | at 272 MHz |
|---|---|---|---|
| cold | 200 (two tiles, one reduction) | 573,587 | 2.1 ms |
| incremental | 40 (one tile, plus memo) | 437,692 | 1.6 ms |

About 249k cycles of each job are the matrix engine; the rest is QR. Most of
the QR time goes to the inner-loop passes. For each column `i`, the
`P - i` columns to its right are updated `N_INNER` at a time, and each pass
costs `2 * ceil(rows / LANES) + 2` cycles. The outer loop PE adds about 260
cycles per column of square root and division, which cannot overlap with the
inner loop.

## Where this departs from the description it follows

- **PEs per processing unit.** The evaluated configuration is described as
  "2 PUs, each with 3 outer loop PEs". The block diagram instead shows one
  outer loop PE and a row of inner loop PEs per processing unit. This design
  follows the diagram. The 3 is used as the number of inner loop PEs
  (`N_INNER = 3` at the top; the `qrd_pu` module default is 8).
- **Beyond the published description.** None of the following is published:
  - the number format;
  - the `gamma` encoding;
  - the closed form for `dot(ref, ref)`;
  - the tile height `2P`;
  - the odd-factor pass-through;
  - the scratchpad layout;
  - the DRAM word format and protocol;
  - the host read port for `M`;
  - the lowest-idle-engine policy;
  - the exact form of the doubling step.

  All of these are this design's own choices.
- **Returning factors.** In the block diagram, processing-unit results return
  through a concat stage straight to the input mux of the processing units.
  Here each factor goes to a scratchpad slot and is read back for the next
  level. The data is the same, at the cost of `P` cycles per factor.
- **Path from R to the systolic array.** The diagram also connects the R
  matrix buffer directly to the systolic array. Here `R_new` reaches the
  matrix engine through the scratchpad's R region, because that region is
  also what the DMA stores back.
- **Out of scope.** The host-to-board copy over PCIe, the DRAM controller,
  the DRAM itself and the clock PLL are vendor or off-chip parts. The design
  exposes a simple DRAM port where they would connect, and the testbenches
  model DRAM behaviourally.
- **Key length.** The MemeTracker keys (128 bytes) need `P = 128`. The
  defaults hold keys up to 96 bytes. `P` is a parameter, so a build for 128
  is one change.
- **Batch size.** A job takes at most 768 new rows. Larger batches are sent as
  several incremental jobs on the same model, and memoization makes that exact.
- **Storage.** All buffers are written as register arrays. On an FPGA, the
  matrix buffers, scratchpad and matrix-engine arrays would map to block RAM.
  As written, the 96 x 192 matrix buffers allow the column-parallel access
  that the PEs need in one cycle. Generic synthesis of the full size is
  therefore very large.

## Files

| module | role |
|---|---|
| `sia_pkg` | `fx_t`, `acc_t`, `train_mode_e`, `fx_mul`, `fx_from_int` |
| `sia_top` | controller, DMA, `NUM_TE` training engines |
| `accel_controller` | job registers, engine scheduling, completion flags |
| `dma_controller` | DRAM <-> scratchpad transfers |
| `training_engine` | scratchpad + QR unit + matrix engine, job sequencing |
| `scratchpad` | two-port row memory |
| `qrd_unit` | tiles, reduction tree, memoized merge, copy |
| `qrd_pu` | one Householder processing unit |
| `outer_loop_pe`, `inner_loop_pe` | reflector/gamma and column update |
| `macc_vec` | LANES-wide multiply-accumulate |
| `matrix_engine`, `systolic_array` | Heller inverse and `R^-1 R^-T` |
| `isqrt`, `udiv` | bit-serial square root and restoring divider |

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one ends
with `TB_RESULT checks=N failures=M`.

- **Arithmetic references.** The testbenches compute their references in
  `real` arithmetic. Examples:
  - `R^T R = X^T X`, and a zero lower triangle, for the QR blocks;
  - `M` against back substitution or Gauss-Jordan for the matrix engine;
  - exact integer sums for the MAC.
- **Cycle counts.** Where a cycle count is defined, the testbench checks it,
  for example in `inner_loop_pe` and `matrix_engine`.
- **`tb_sia_top`.** Runs the whole accelerator at a reduced size: `P = 4`,
  two engines, DRAM with random latency. It counts each mechanism and fails if
  any never happened:
  - cold and incremental jobs;
  - reduction levels;
  - odd leftover factors;
  - multi-round tiling;
  - zero-column skips;
  - engines running concurrently;
  - DMA holding a job back.
- **`tb_sia_full`.** Runs the defaults, with no parameter overrides: one cold
  job with 200 keys, then one incremental job with 40 more. It checks all of
  `M` and the stored `R`.
- **`tb_sia_workloads`.** Also at the defaults. It covers keys shorter than 96
  bytes, which are zero-padded:
  - a 12-byte-key model (300 keys cold, then 50 incremental);
  - an 82-byte-key model (200 keys cold), on a second engine at the same time.

  For padded keys the zero columns are skipped. `R` comes out block diagonal,
  and the leading `klen x klen` block of `M` is the exact inverse of the real
  columns' `X^T X`. The bench checks that block and the whole stored `R`. The
  rest of `M` is saturated and meaningless, but the host never uses it,
  because `X^T Y` is zero there.

To simulate, for example:

    verilator --binary --timing --assert -Irtl -y rtl rtl/sia_pkg.sv \
        tb/tb_sia_top.sv --top-module tb_sia_top
    ./obj_dir/Vtb_sia_top

At the default size, the build takes about 80 s and the run about 40 s.
