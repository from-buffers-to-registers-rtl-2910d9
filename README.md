# 3D-Flow: FlashAttention on four stacked PE tiers

FlashAttention avoids writing the N x N attention matrix to DRAM by walking over key/value
tiles and keeping running row statistics (row maximum `m`, softmax denominator `l`,
unnormalised output `O`). On a conventional accelerator the operators of one inner
iteration (`Q K^T`, row max, `exp`, row sum, `P V`, rescaling) still hand their
intermediate tiles to each other through on-chip SRAM, and the slow softmax steps stall
the matrix array. This design removes that hand-off. Four d x d processing-element (PE)
arrays are stacked, one per group of operators, and every PE passes its result straight
into a register of the PE above it over a vertical hybrid-bonded link (called a TSV link
below). An inner iteration flows bottom to top; a new one enters the bottom tier every
`2d` cycles, so three to four iterations are in flight at any time, each in a different
tier, with no buffer between the tiers.

This RTL implements one such stack for one attention head, at the size described for it
(d = 128, four 128 x 128 tiers), plus the feeders, the loop controller and the final
normalisation. The on-chip tile buffer and DRAM are outside it; the stack reads its tiles
through a simple column-read port.

## The algorithm per inner iteration

For query tile `Q_i` (d rows) and key/value tiles `K_j`, `V_j` (d rows each), head
dimension d:

| step | formula | tier |
|---|---|---|
| scores | `S = Q_i K_j^T` | 0 |
| row max | `local_m = rowmax(S)`, `new_m = max(local_m, old_m)` | 1 |
| shifts | `a = old_m - new_m`, `N = S - new_m` | 1 |
| exponentials | `b = 2^(c a)`, `P = 2^(c N)` with `c = log2(e)/sqrt(d)` | 2 |
| row sum | `local_l = rowsum(P)`, `new_l = old_l b + local_l` | 2 |
| output | `local_O = P V_j`, `new_O = diag(b) old_O + local_O` | 3 |
| after the last `j` | `O_i = diag(l)^-1 O` | normaliser above tier 3 |

`old_m` starts at minus infinity, `old_l` and `old_O` at zero, at the start of every
outer block.

## The tiers

**Tier 0, `layer0_qk` / `pe_l0`: S = Q K^T, output-stationary.** Row i of the Q tile
enters array row i from the left, row j of the K tile enters column j from the top, both
skewed by one cycle per lane. PE(i,j) accumulates `S[i][j]` in place. A first/last flag
travelling with Q clears the accumulator and, after the d-th product, copies the sum into
the PE's TSV register for one cycle. `S[0][0]` is ready first and the rest follow along
anti-diagonals.

**Tier 1, `layer1_max` / `pe_l1`: running maximum.** Because `S[i][j]` arrives one cycle
after `S[i][j-1]`, a compare chain running to the right, one register per PE, produces the
row maximum at the rightmost PE with no waiting. The maximum then runs back to the left.
As it passes, each PE compares it with its own copy of `old_m`, subtracts the result
`new_m` from the `S` it is holding, and sends `N` up. The rightmost PE also forms `a`. It
has a single subtractor, so it sends `a` first and its own `N` one cycle later over the
same link, with a flag telling which is which.

**Tier 2, `layer2_exp` / `pe_l2` / `fx_exp2`: exponentials and the denominator.** Every
PE holds the constant `c` in a register (written once through `cfg_we`/`cfg_c`). An
arriving `N` (or `a`) is multiplied by `c` and goes through the exp2 unit in the same
cycle. The result `P` is sent up; `b` stays in the PE. The row sum runs as a chain from
column 0 to the right, adding one `P` per cycle. `N`, and so `P`, arrives right to left,
which makes `P[i][0]` the last of the row, so the chain can start there and never waits.
The chain ends at the rightmost PE, which holds `b` and `old_l`. That PE forms `new_l`
and sends `{b, new_l}` up.

**Tier 3, `layer3_pv` / `pe_l3`: P V and rescaling, weight-stationary.** The tier is
laid out transposed: array row r stands for key r and array column c for query row c,
so PE(r,c) holds `P[c][r]`. The TSV from tier-2 PE(c,r) therefore lands on tier-3
PE(r,c). V row r enters array row r from the left. Partial sums run down, and the bottom
of column c produces `local_O[c][0..d-1]`, one element per cycle. The bottom PE numbers
these elements and sends them back up the column, each carrying `b[c]` and `new_l[c]`.
Every PE keeps one element of O. The PE in row x takes element x when it passes, forms
`new_O = b old_O + local_O`, keeps it as `old_O` and loads it into its output register.
All PEs of a column do this in the same cycle: element x reaches row x exactly d-1
cycles after element 0 left the bottom. The output registers then shift up, and column c
delivers `new_O[c][0..d-1]` from its top.

**Normaliser, `out_norm`.** After the last inner iteration of an outer block, each element
leaving the top of a column is divided by `l` of that column's query row: one divider per
column. Earlier iterations' outputs are dropped there; they live on as `old_O` inside tier 3.

**Feeders and controller, `skew_buffer`, `fa3d_ctrl`, `iter_seq`.** Three triangular
shift-register arrays turn one column vector per cycle into the skewed pattern. The
controller walks `tr` outer x `tc` inner blocks. For each inner iteration it reads d Q/K
columns, then stays idle for d cycles. The V columns of the same iteration are read a
fixed `V_OFF` cycles later.

**Iteration tags.** Instead of a global "new block" signal, two tag bits travel with the
data of each iteration through every tier: `init` (first inner iteration: take `old_m`
as minus infinity, `old_l` and `old_O` as 0) and `fin` (last inner iteration: the
output is final). Each tier resets its running statistics exactly when the first data of
a new outer block reaches it, while the previous block's last iteration is still
finishing above.

## One iteration, cycle by cycle

Cycle 0 is the cycle in which the controller reads column 0 of the Q and K tiles; `i` is
the query row and `j` the key index (tiers 0-2) or x the output column (tier 3).

| event | cycle |
|---|---|
| `S[i][j]` on tier-0 TSV register | `d + 1 + i + j` |
| row maximum at rightmost tier-1 PE | `2d + 1 + i` |
| `a[i]` / `N[i][d-1]` to tier 2 | `2d + 2 + i` / `2d + 3 + i` |
| `N[i][j]`, j < d-1, to tier 2 | `3d + 1 + i - j` |
| `P[i][j]` to tier 3 | one cycle after `N[i][j]` |
| `{b[i], new_l[i]}` to tier 3 | `4d + 2 + i` |
| V column x read | `V_OFF + x`, `V_OFF = 3d + 3` |
| `local_O[i][x]` leaves bottom of tier 3 | `4d + 4 + i + x` |
| `new_O[i][x]` leaves top of tier 3 | `5d + 5 + i + x` |
| normalised `O[i][x]` on `o_col[i]` | `5d + 6 + i + x` |

The next iteration starts at cycle 2d and follows the same table shifted by 2d. So the
stack finishes one inner iteration every 2d cycles, and the first result of an outer
block with `tc` inner blocks appears `(tc-1)*2d + 5d + 6` cycles after its first read.
The testbenches check both numbers.

### Why `V_OFF` is exactly 3d+3

The tightest part of the schedule is tier 3. Each PE there has two weight registers: the
TSV "shadow" register and the active weight. The shadow value becomes active when the
first V element of the next tile passes (`v_first`). Three constraints meet:

* `P[i][0]` reaches the shadow register last, at `3d + 2 + i`. V row 0 must not reach
  PE(0,i) before that, so `V_OFF >= 3d + 2`.
* The next iteration's `P[i][d-1]` arrives at `4d + 4 + i`. The current `v_first` must
  have passed PE(d-1,i) by then, so `V_OFF <= 3d + 4`.
* `{b, new_l}` (at `4d + 2 + i`) must be latched before `local_O[i][0]` leaves the bottom.

`3d + 3` sits in the middle of this three-cycle window. A change to any latency in tiers
0-2 moves the window, so re-derive it (or run `tb_flow3d_top`) after such a change.
Tiers 1 and 2 have similar but looser windows. Tier 1 overwrites a held `S` with the next
iteration's one cycle after it last needs it (column 0). The tier-2 row sum reaches the
rightmost PE at least one cycle before the next `b` overwrites the current one.

## Numbers

All data are signed 32-bit fixed point with 16 fractional bits (`fa3d_pkg::fx_t`).
Products are formed at 64 bits and truncated back. Minus infinity is the most negative
code, and subtractions involving it saturate, so `2^(c a)` is exactly 0 on the first
iteration. `fx_exp2` splits its non-positive argument into integer and fraction. It
evaluates `2^f ~ 1 + f (0.6565 + 0.3435 f)` (at most 0.32 % error) and shifts right by
the integer part. Against exact floating-point attention, outputs agree to better than
0.02 for inputs in [-1, 1).

## Using the top level

`flow3d_top #(D, NW)`:

* Write `cfg_c = round(2^16 * log2(e)/sqrt(d))` with `cfg_we` high for one cycle.
* Pulse `start` with `tr` (number of query tiles) and `tc` (number of key/value tiles).
* Answer reads in the same cycle. When `qk_rd` is high, drive
  `q_col[i] = Q[qk_bi*D + i][qk_k]` and `k_col[j] = K[qk_bj*D + j][qk_k]`. When `v_rd` is
  high, drive `v_col[r] = V[v_bj*D + r][v_c]`.
* Collect the output. `o_col_v[c]` marks `O[bi*D + c][x]` for x = 0..D-1 on consecutive
  cycles, column c one cycle behind column c-1.

The sequence length must be a multiple of D (pad with zeros; padded keys need a score far
below the real ones, which the stack does not do for you). `tr` and `tc` are 16 bits wide.

## Where this implementation departs from the published description

* **Tier-3 start time.** The published timeline feeds V at cycle 2d and finishes at 5d.
  Here V is fed at 3d+3 and the last output leaves at about 7d. The reason: `P` reaches
  tier 3 in decreasing key order (it follows the leftward row-max return), while V's skew
  needs it in increasing key order. The 2d-cycle iteration rate is unaffected; only the
  latency grows.
* **Row-sum direction.** The published text says the row sum moves leftward; the PE
  drawing shows it moving right. This design follows the drawing, which ends the sum in
  the column that holds `b` and `old_l`.
* **Transposed link into tier 3.** The PV drawing places `P[i][j]` at row j, column i of
  tier 3, while the text speaks of links between aligned PEs. The RTL follows the drawing:
  tier-2 PE(i,j) feeds tier-3 PE(j,i).
* **Own choices where the description is silent.** These include the number format and
  the exp2 polynomial, and the way the rightmost tier-1 PE time-shares its subtractor.
  The tags that restart the running statistics and the double-buffered tier-3 weights
  are also this design's own. So are the element numbers on the local_O return path, the
  place and form of the final division, the constant-load port and the memory-side read
  protocol.
* **Not built.** The drawn selector on the tier-0 PE's downward output belongs to a 2D
  drain mode; S leaves only through the link here. Also not built: several stacks for
  several heads, the on-chip buffer and its double buffering, the DRAM interface, and
  the physical links themselves, which are plain register-to-register wires.

## Files

| file | content |
|---|---|
| `rtl/fa3d_pkg.sv` | number format, tag type, fixed-point helpers |
| `rtl/pe_l0.sv`, `rtl/layer0_qk.sv` | tier 0 |
| `rtl/pe_l1.sv`, `rtl/layer1_max.sv` | tier 1 |
| `rtl/fx_exp2.sv`, `rtl/pe_l2.sv`, `rtl/layer2_exp.sv` | tier 2 |
| `rtl/pe_l3.sv`, `rtl/layer3_pv.sv` | tier 3 |
| `rtl/skew_buffer.sv`, `rtl/iter_seq.sv`, `rtl/fa3d_ctrl.sv` | feeders, loop controller |
| `rtl/out_norm.sv` | final division by l |
| `rtl/flow3d_top.sv` | the stack |

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. Example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fa3d_pkg.sv tb/tb_flow3d_top.sv \
          --top-module tb_flow3d_top -Mdir obj -o sim && obj/sim
```

| testbench | what it checks |
|---|---|
| `tb_fx_exp2` | exp2 against `$pow`, 4 180 points |
| `tb_skew_buffer` | per-lane delays |
| `tb_fa3d_ctrl` | the full read schedule, cycle by cycle |
| `tb_out_norm` | division and the final-only filter |
| `tb_layer0_qk` .. `tb_layer3_pv` | each tier at D = 4, values and exact output cycles, three iterations |
| `tb_flow3d_top` | whole stack, D = 4, 2 x 3 tiles, against exact softmax attention; 2d rate; overlap, rescale, restart and normalisation each observed |
| `tb_attn_seq8` | whole stack, D = 16, 8 x 8 tiles (the tile count of a 1K-token head at d = 128) |

Size limits: the whole stack has simulated at D = 4, 8 and 16. The default D = 128 is four
128 x 128 arrays, 65 536 PEs. Linting it with verilator takes about 14 GB of memory and
several minutes (3.4 GB and one minute at D = 64). A full-size simulation build is
correspondingly larger and has not been run.
