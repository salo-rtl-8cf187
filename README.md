# SALO spatial accelerator: SystemVerilog RTL

Long-sequence transformers (Longformer, ViL) replace full self-attention with
a *hybrid sparse* pattern. Each query attends to a sliding window of nearby
keys. A few *global* tokens attend to, and are attended by, every token. This
cuts the cost from quadratic to linear in the sequence length. GEMM libraries
cannot run such patterns efficiently.

SALO (Shen et al., DAC 2022) is a systolic accelerator built around one
observation. Queries `q_i` and `q_{i+1}` share all but one key of their
windows. If keys flow **diagonally** through a PE array while queries flow
**horizontally**, each key enters the array once and serves up to 32
consecutive queries. One extra PE column handles the global key, and one
extra PE row handles the global query. Both reuse data already in the array.
Each PE computes the whole attention in place: dot product, exponent, row
sum, normalisation, and the weighted sum of values. Windows longer than the
array are split into tiles, and a small *weighted sum module* per row merges
the tiles exactly.

This repository holds synthesizable SystemVerilog for that accelerator, in
the configuration of the paper's Table 1: a 32 x 32 PE array, one global PE
column, one global PE row, 33 weighted sum modules, and 16/32/32/32 KB
query/key/value/output buffers. It also holds self-checking testbenches.
The RTL is an independent implementation, written from the paper's
description. Where the paper is silent (number formats, the exponent and
reciprocal circuits, the controller, the buffer organisation, the host
interface), the choices are this design's own. They are marked as such
below and in each file header.

## 1. How one pass maps onto the array

The accelerator works in **passes**. One pass computes a tile of 32 queries
(array rows `r = 0..R-1`) against 32 window positions (array columns
`c = 0..C-1`), plus the global token.

**Key numbering.** A pass reads `R+C-1 = 63` consecutive keys, numbered
`p = 0..62` from address `k_base`. PE `(r, c)` works on pass key

    p = r + (C-1-c)

Row 0 therefore holds keys 0..31, with key 0 in the rightmost column. Row
`r` holds keys `r .. r+31`. Key `p < C` enters row 0 from the top at column
`C-1-p`. Key `p >= C` enters row `p-C+1` from the left. Each key then moves
one PE down-right per cycle, from `(r,c)` to `(r+1,c+1)`, and leaves the
array at the right edge. Values use the same ports and the same route in
stage 5.

**What the host chooses.** If the query for row `r` is `q_{i0+r}` and
`k_base` points at key `i0 + a + t*C`, then row `r` covers window offsets
`a + t*C .. a + t*C + C-1` relative to its own query. This holds for every
row. So one pass is exactly window tile `t` of a sliding window starting at
offset `a`, for 32 queries at once. The following controls go with it:

* `col_en[c]` removes column `c`. It is used for the last, partial tile of
  a window whose size is not a multiple of 32. Column `c` holds offset
  `a + t*C + C-1-c`.
* `kv_first .. kv_last` marks the pass keys that exist. Keys before the
  start or past the end of the sequence are masked. A masked key's
  exponent becomes 0.
* `first` is set for the first tile of a window. Later tiles are merged
  with the stored result (section 4).
* The **global PE column** is the 33rd PE of every row. It sees the row's
  query after the query leaves column 31. It sees the global key `kg`,
  which is broadcast to all rows. Enable it (`gcol_en`) in exactly one
  tile per query tile, so that the global key is counted once.
* The **global PE row** sits below array columns 1..32. Its PE `j` takes
  the key that leaves `PE(R-1, j)`. In one pass it therefore sees pass keys
  `R-1 .. R+C-2`. Over a run of passes, the host enables it (`grow_en`,
  with `g_first` on the first enabled pass) so that each key of the
  sequence is seen exactly once.
* **Dilated windows** are handled by reordering in the host. Store
  `q_i, q_{i+d}, q_{i+2d}, ...` (and the matching keys and values) next to
  each other in the buffers, and the dilated window becomes a sliding
  window.

Choosing these values for a whole layer is the *data scheduler*'s job. In
the paper the scheduler is a transformation done before execution, not
hardware. Here the testbenches play that role; `tb/tb_salo_top.sv` holds a
complete, readable scheduling loop.

**Element timing.** Vectors enter element by element, one element per
cycle. Element `t` of query `r` and element `t` of a key must meet in the
same PE in the same cycle. Working back from the diagonal path, this fixes
the cycle (relative to the stage start) at which element 0 of each input
enters:

| input                          | first element at cycle |
|--------------------------------|------------------------|
| queries, all rows              | 0                      |
| key/value entering top column c| c                      |
| keys/values entering from left | 0                      |
| global query                   | 1                      |
| global key/value (broadcast)   | C                      |

The edge *vector registers* (`salo_vec_reg`) apply these skews. Each one
holds a whole vector and presents element `tcnt - SKEW`.

## 2. The processing element and its five stages

Each PE has one fixed-point MAC (`a*b + c`), a barrel shifter after it,
and the accumulator `Reg_acc`. The stage number, which the controller
broadcasts, selects the MAC operands:

| stage | operation                                     | a          | b       | c            | shift       |
|-------|-----------------------------------------------|------------|---------|--------------|-------------|
| 1 QK  | `Reg_acc += q[t]*k[t]` (output stationary)    | k element  | q elem  | Reg_acc      | 0           |
| 2 EXP | `Reg_acc = 2^Reg_acc`                         | LUT slope  | Frac    | LUT icpt<<8  | 8 - int(S)  |
| 3 SUM | `sum_out = sum_in + Reg_acc` (left to right)  | 1          | Reg_acc | sum_in       | 0           |
| 4 NORM| `Reg_acc = Reg_acc * inverse`                 | inv mant.  | Reg_acc | 0            | inv shift   |
| 5 SV  | `sum_out = sum_in + v[t]*Reg_acc` (weight stationary) | v element | Reg_acc | sum_in | 0       |

In stage 3 the row sum leaves the global-column PE and enters the row's
**Inv** unit (`salo_recip`). Inv returns a 16-bit mantissa and a shift.
These are broadcast back to every PE of the row for stage 4. There is one
reciprocal per row instead of a divider per PE, as the paper proposes.

**Exponent.** Following Softermax, the exponent is base 2. A score
`S = int + f` is evaluated as `2^f ~ m_s*f + b_s`, where the segment
`s = top 3 bits of f` selects the line. This is followed by a shift by
`int`. The slope/intercept tables (`salo_exp_lut`) hold the chords of
`2^x` over 8 segments. Their error is below 0.1 %. To get a natural
softmax, the host multiplies the queries by `log2(e)/sqrt(d)` during
quantisation. This design does not compute a row maximum. Scores are
clamped to `[-24, 8)` before the exponent, so the inputs must be scaled to
keep scores inside that range.

**Number formats.** The 8-bit inputs with 4 fraction bits and the 16-bit
outputs follow the paper. All other formats are this design's choice:

| quantity          | format                                   |
|-------------------|------------------------------------------|
| q, k, v           | signed 8 bit, 4 fraction bits            |
| score S (Reg_acc) | signed 32 bit, 8 fraction bits           |
| exponent E        | unsigned in 32 bit, 16 fraction bits     |
| probability P     | 15 fraction bits (1.0 = 32768)           |
| row output        | 32 bit, 19 fraction bits (P x v)         |
| stored output     | signed 16 bit, 8 fraction bits           |
| weight W          | unsigned 40 bit, 16 fraction bits        |

## 3. Inverse unit

`salo_recip` first finds the leading one of `x`. It normalises `x` to a
16-bit mantissa `m` in `[2^15, 2^16)`. A 17-step restoring division then
computes `floor(2^31/m)`. The result satisfies
`1/x ~ mant * 2^-(lead+16)`, with a relative error below 2^-15. The latency
from `start` to `done` is 19 cycles. A PE row turns `E*mant` into `P` with a
right shift by `lead + 1`.

## 4. Merging window tiles: the weighted sum module

Let tile 1 of a query's window give output `o1`, normalised by its own sum
`W1`. Let the earlier tiles give `o2` with weight `W2`. Then

    o = W1/(W1+W2) * o1 + W2/(W1+W2) * o2,   W = W1 + W2

This equals the softmax over the union of the tiles. `salo_weighted_sum`
takes `W1` when the row sum leaves the row in stage 3. It computes
`1/(W1+W2)` with its own `salo_recip` and forms both weights, all before
stage 5 starts. In stage 5, each output element costs two multiplies and
one add. Merged elements and the new `W` are written back to the output
buffer. `W` goes into a 40-bit weight store beside the output buffer; this
store is this design's choice. There are two special cases:

* With `first` set, the stored result is ignored.
* A tile whose keys are all masked (`W1 = 0`), or a disabled row, leaves
  the stored result unchanged.

## 5. Timing of a pass

`salo_ctrl` runs the phases one after another:

| phase | cycles           | default (R=C=32, D=64) |
|-------|------------------|------------------------|
| LOAD  | R+C+1            | 65 |
| QK    | D+C+1            | 97 |
| EXP   | 1                | 1  |
| SUM   | C+2              | 34 |
| INV   | 20               | 20 |
| NORM  | 1                | 1  |
| SV    | D+C+3            | 99 |
| WB    | R+1              | 33 |
| DONE  | 1                | 1  |

Counting the start cycle, a pass takes 352 cycles at the default size.
In LOAD, each buffer delivers one whole vector per cycle. Keys and values
are read from the same address of their two buffers. WB writes the updated
rows. Passes do not overlap. The paper gives no cycle counts; this schedule
is this design's own.

## 6. Host interface (`salo_top`)

* **Loading data.** `q_wr_*`, `k_wr_*` and `v_wr_*` each write one
  64-element vector per cycle while the accelerator is idle.
* **Buffer sizes.** `QDEPTH = 256`, `KDEPTH = 512` (for each of K and V)
  and `ODEPTH = 256` vectors. These are the paper's 16, 32, 32 and 32 KB
  at 64-byte input vectors and 128-byte output vectors.
* **Addressing.** Addresses wrap, so the key and value buffers can be used
  as rings while a long sequence is streamed through them.
* **Running a pass.** Assert `start` with the pass descriptor (`q_base`,
  `qg_addr`, `k_base`, `kg_addr`, `o_base`, `og_addr`, `row_cnt`,
  `col_en`, `kv_first`, `kv_last`, `kg_ok`, `gcol_en`, `grow_en`, `first`,
  `g_first`). `busy` stays high until `done` pulses.
* **Reading results.** `o_rd_*` reads an output vector and its weight,
  with one cycle of latency.
* **Layout.** The global token's vectors are stored apart from the window
  sequence, at their own addresses.

## 7. Files

| file                        | block                                   |
|-----------------------------|-----------------------------------------|
| `rtl/salo_pkg.sv`           | formats, `stage_e`                      |
| `rtl/salo_exp_lut.sv`       | slope/intercept tables                  |
| `rtl/salo_pe.sv`            | processing element                      |
| `rtl/salo_recip.sv`         | Inv (reciprocal) unit                   |
| `rtl/salo_pe_row.sv`        | chain of PEs + Inv                      |
| `rtl/salo_array.sv`         | PE array, global column, global row     |
| `rtl/salo_weighted_sum.sv`  | weighted sum module (one per row)       |
| `rtl/salo_vec_reg.sv`       | edge vector register with skew          |
| `rtl/salo_buffer.sv`        | SRAM buffer (1 write, 1 read port)      |
| `rtl/salo_ctrl.sv`          | pass sequencer                          |
| `rtl/salo_top.sv`           | the accelerator                         |

## 8. Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
For example:

    verilator --binary --timing --assert -Irtl rtl/salo_pkg.sv tb/tb_salo_top.sv \
              --top-module tb_salo_top && ./obj_dir/Vtb_salo_top

* The unit testbenches (`tb_salo_pe`, `tb_salo_pe_row`, `tb_salo_array`,
  `tb_salo_recip`, `tb_salo_weighted_sum`, `tb_salo_exp_lut`,
  `tb_salo_vec_reg`, `tb_salo_buffer`, `tb_salo_ctrl`) compare results
  with arithmetic done in the testbench. Most of it is floating point.
* `tb_salo_top` runs a 4 x 4 array with D = 8. The sequence has 18 tokens,
  the window runs over offsets -4..+5, and there is one global token.
  The test covers 15 passes. Along the way it exercises sequence tiles, a
  partial last tile, window-split merges, masked keys, masked columns, and
  both global units. It counts each of these and fails if one never
  happens.
* `tb_salo_top_full` runs the same test with every parameter at its
  default: a 32 x 32 array and D = 64. It uses 100 tokens and a window of
  80.
* `tb_salo_workload_longformer` runs the default configuration on a
  Longformer-style slice: a 512-wide window split into 16 tiles, one
  global token, and 220 tokens.

**Accuracy.** The end-to-end tests check every output against a
floating-point model of the same attention (exact base-2 softmax, real
arithmetic), with a tolerance of 0.02. Each prints its largest error. The
values seen are 0.004 (4 x 4 array), 0.005 (full size) and 0.007
(Longformer slice, 16 merged window tiles). One output LSB is 1/256 = 0.0039,
and the outputs range over about +-4. The error grows slowly with the number
of merged tiles, because every merge rounds once more.

## 9. Where this design departs from, or adds to, the paper

* **Choices not specified by the paper:** the number formats; base-2
  exponent with 8 segments and score clamping; the reciprocal algorithm;
  buffer word organisation and ports; the pass descriptor; the
  controller's load and write-back phases; the weight store; and the mask
  signals (`col_en`, key ok bits).
* **Global key.** The global key is broadcast to all rows of the global
  column in the same cycle. The paper's figure shows a vertical line but
  does not settle this.
* **No pipelining across passes.** The next pass's load does not overlap
  the current pass's stages. The paper's performance figures come from a
  cycle model, not from this RTL, and may assume overlap.
* **Host-side scheduling.** Splitting, reordering and global-token
  scheduling are not in hardware.
* **ViL image edges.** For ViL's 2-D windows, a key that lies in a
  neighbouring image row of the flattened sequence must be masked
  *depending on the query*. The per-key and per-column masks here cannot
  express that. The host must either pad the image rows or accept
  wrap-around neighbours.
* **Clock.** The paper reports 1 GHz at 45 nm. No timing closure was
  attempted on this RTL. The MAC in each PE is a combinational
  18 x 33-bit multiply-add followed by a shifter.

## 10. Sizing the paper's workloads

The head dimension of all three evaluated layers is 64 (Longformer-base:
768/12; ViL stage 1: 192/3; ViL stage 2: 384/6). It matches the vector
length D = 64. All three use one global token, which matches the single
global row and column. A pass needs 33 query and 64 key/value vectors, so
the sequences are streamed through the buffers. At 352 cycles per pass:

* **Longformer** (n = 4096, w = 512): 128 x 16 = 2048 passes per head,
  about 8.7 M cycles for 12 heads.
* **ViL stage 1** (56 x 56, window 15 x 15): 15 row segments per window
  and 98 query tiles give 1470 passes per head, 4410 for 3 heads.
* **ViL stage 2** (28 x 28): 375 passes per head, 2250 for 6 heads.
