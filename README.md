# Four-nodes-per-cycle fixed-complexity sphere decoder

A MIMO receiver has to find which vector of symbols the transmit antennas sent,
given the received vector and the channel. After a QR decomposition of the
channel this becomes a search through a tree with one level per real symbol.
The fixed-complexity sphere decoder (FSD) visits a fixed, predetermined set of
nodes in that tree. It needs no radius and no pruning, so its throughput does not
depend on the noise. This RTL implements an FSD for a 4x4 antenna system with
16-QAM. It processes four tree nodes per clock cycle and visits the tree level
by level (breadth first). That visiting order lets the three arithmetic tasks of
a node run in three different cycles, so no cycle has to wait on another.

One detection (a "traversal") takes 30 clock cycles and yields a list of 16
candidate symbol vectors with their squared distances. A soft-output (LLR)
stage, not included here, turns that list into bit reliabilities. At 30 cycles
per 16 bits the design delivers 0.53 bit per cycle: 213 Mbit/s at 400 MHz.

The architecture comes from the published four-nodes-per-cycle FSD: its unit
structure, schedule, cache sizes and 12-bit data width. Everything the
architecture leaves open was chosen for this implementation and is marked as
such below: the fixed-point scaling, the symbol code, the handshake,
saturation of b and tie breaking.

## The search tree

The complex 4x4 model is rewritten as a real 8x8 model, so each of the eight
tree levels `i = 7 .. 0` chooses one real symbol `s_i` from {-3, -1, +1, +3}.
Once `R` (upper triangular, positive diagonal) and `y^ZF = Q^H y` are known, the
cost of a path is accumulated level by level:

    b_i = y_i^ZF - sum_{j>i} R_ij s_j        (interference from symbols already fixed)
    e_i = b_i - R_ii s_i
    d_i = d_{i+1} + e_i^2                    (partial Euclidean distance, PED; d_8 = 0)

The node distribution is {1,1,1,1,1,1,4,4}:

* Level 7 is fully expanded, giving 4 nodes.
* Level 6 is fully expanded below each of them, giving 16 nodes.
* On each level from 5 down to 0, each of the 16 paths keeps only its best child.
  That is the child with the smallest `|e_i|`, chosen by *direct enumeration*.

The design thus visits 4 + 16 x 7 = 116 nodes and returns 16 complete paths.
Path `k = 4c + n` has `s_7 = code c` and `s_6 = code n`. These two symbols never
change, so they are wired as constants and not stored.

Each of the 16 nodes of one level splits into four *groups* G(L,c), c = 0..3.
A group holds the four nodes of one column, and the four nodes of a group are
processed in parallel. Within a level the groups go left to right, then the
search moves down a level (a zig-zag).

## The schedule: three tasks, three groups, one cycle

A node needs three things, which depend on each other in a chain:

1. `b` for its level. This needs the symbols above it on its path.
2. Its own PED `d`. This needs `b` and its symbol.
3. Enumeration, which chooses its child's symbol. This needs the child's `b`.

A depth-first decoder must run these one after another for each node. Here,
in every cycle the same three tasks run on three *different* groups:

* The four PED units (`di_unit`) work on group G(L,c). Its `b` and its symbols
  are already known.
* The four b units (`bi_unit`) compute `b_{L-1}` for the children of G(L,c).
  These children are group G(L-1,c). They need only symbols down to level L,
  which enumeration chose earlier.
* The four enumeration units (`de_unit`) choose the symbols of the group whose
  `b` was written in the previous cycle.

Counting the extra start cycle, a traversal runs as follows:

| cycle | PED units (d) | b units (b) | enumeration (DE) |
|---|---|---|---|
| start | – | load `b_7 = y_7^ZF` | – |
| 1 | G(7,0): the 4 root children | `b_6` for G(6,0..3), one per unit | – |
| 2 | G(6,0) | G(5,0) | – (level 6 is fully expanded) |
| 3 | G(6,1) | G(5,1) | G(5,0) |
| 4 | G(6,2) | G(5,2) | G(5,1) |
| 5 | G(6,3) | G(5,3) | G(5,2) |
| 6 | G(5,0) | G(4,0) | G(5,3) |
| 7 | G(5,1) | G(4,1) | G(4,0) |
| ... | ... | ... | ... |
| 26 | G(0,0) | – | G(0,3) |
| 27–29 | G(0,1..3) | – | – |

In general, cycle `t >= 2` works on level `L = 6 - (t-2)/4` and column
`c = (t-2) mod 4`. For a group G(L,c) with L <= 5, the three tasks follow each
other:

* `b_L` is computed in cycle `t`.
* Its symbols are enumerated in cycle `t+1`.
* Its PED is formed in cycle `t+4`, the next time the schedule reaches column `c`.

Every value is therefore ready at least one cycle before it is read. The cost
is the storage for up to four cycles of results, in three small caches.

Cycle 1 is special. All four level-6 nodes of a group share one `b_6`, because
they have the same parent. So the four b units compute the four groups' `b_6`
at once, and the result is broadcast into the group's four cache entries. In
the same cycle the four level-7 PEDs are broadcast the same way, because each
one is the parent PED of a whole level-6 group.

## Datapath units

**b unit** (`bi_unit`) handles up to seven products `R_ij s_j`. Each symbol is
±1 or ±3, so no product needs a multiplier. Two multiplexers split each product
into two summands:

* `+3`: `2R` and `R`
* `+1`: `0` and `R`
* `-1`: `0` and `-R`
* `-3`: `-2R` and `-R`

The 14 summands are not added one by one. A Wallace tree of 3:2 carry-save
adders reduces them in six levels (14 → 10 → 7 → 5 → 4 → 3 → 2). A single
ripple-carry adder then produces the sum, which is subtracted from `y_i^ZF`.
Summands with `j <= i` are forced to zero, so the same unit serves every level.
The tree is 18 bits wide, so the sum never wraps. The result is saturated to 12
bits. The architecture rejected an alternative for this unit: accumulating the
sum over several cycles in per-level registers. Spread over the breadth-first
schedule, that needs 16 accumulators and is larger, so it is not built.

**Enumeration unit** (`de_unit`) works as follows:

1. It forms `b - R_ii s` for the four symbols, using `3R = R + 2R`.
2. It takes the magnitudes and clips them to 12 bits.
3. Two levels of 12-bit comparators pick the smallest. The first level compares
   (+3, +1) and (-1, -3), and the second compares the two winners.
4. A multiplexer outputs the winning symbol code.

On a tie the first operand of a comparator wins. That is the first in the
order +3, +1, -1, -3.

**PED unit** (`di_unit`) recomputes `e = b - R_ii s` with the same shift-and-add
product. Recomputing costs less area than keeping 16 error values from
enumeration. The unit then squares `e` with an ordinary multiplier and shifts
the square right by `FRAC` bits to restore the data scaling. It adds the
parent's PED and saturates the sum to 4095.

## Storage

The three caches hold 16 entries each, one per path (entry `4c + n`), and are
flip-flop register files:

| cache | contents | size |
|---|---|---|
| `bi_cache` | latest `b` of each path, plus the input multiplexer for `y_7^ZF` | 16 x 12 bit |
| `path_history_cache` | symbols of levels 5..0 of each path (levels 7, 6 wired) | 16 x 6 x 2 bit |
| `ped_cache` | latest PED of each path; the final PEDs at the end | 16 x 12 bit |

When a cache is written in a cycle, a read of it in that same cycle returns the
old value. The schedule relies on this. For example, in one cycle the PED units
read `b_L` of a group while the b units overwrite it with `b_{L-1}`.

`fsd_ctrl` holds the 3-bit level counter and the 2-bit column counter. It also
holds a one-cycle delayed copy of the b units' target group, which tells the
enumeration units what to work on and where to store the chosen symbols.

## Number format

| quantity | format |
|---|---|
| `R`, `y^ZF`, `b` | 12-bit two's complement, `FRAC = 6` fractional bits (range ±32) |
| PED | 12-bit unsigned, same scaling (0 .. 63.98) |
| symbol code | 2 bits: 0 = -3, 1 = -1, 2 = +1, 3 = +3 |

Only the 12-bit width comes from the architecture. The scaling is a parameter
(`FRAC`) and was chosen here. An input set that makes `b` or a PED overflow is
handled by saturation, which the flags `b_sat` and `d_sat` report.

## Interface and timing of `fsd_top`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; synchronous active-low reset |
| `start` | in | begin a traversal; honoured only while `ready` |
| `ready` | out | idle, or in the last cycle of a traversal |
| `busy` | out | traversal in progress |
| `r_mat[i][j]` | in | `R_ij`; only `j >= i` is read |
| `y_zf[i]` | in | `y_i^ZF` |
| `done` | out | one-cycle pulse: list complete |
| `cand_sym[k][i]` | out | symbol code of level `i` of candidate `k` |
| `cand_ped[k]` | out | squared distance of candidate `k` |
| `b_sat`, `d_sat` | out | a b unit or a PED unit saturated this cycle |

Timing:

* A `start` seen at a clock edge is followed by the start cycle, then cycles 1..29.
* `done` is high 30 cycles after that edge.
* `r_mat` and `y_zf` must hold their values from the start cycle through cycle 29.
  The design does not buffer them; the QR stage that feeds it is expected to hold them.
  Assertions in `fsd_top` report any change while a traversal runs.
* `start` may be raised in cycle 29 of a traversal. Traversals then follow each
  other every 30 cycles, and `done` of one falls in the start cycle of the next.
* Results stay valid until cycle 1 of the next traversal writes the PED cache.
  That is one cycle when traversals run back to back, or indefinitely when idle.

## Where this implementation departs from or adds to the architecture

* The architecture loads `y_7^ZF` into the b cache at reset. Here it is loaded
  in the extra start cycle of every traversal, which is the cycle that the
  30-cycle count already includes. This lets consecutive traversals run
  without a reset.
* Not specified by the architecture, so chosen here:
  * the fixed-point scaling
  * saturation of `b`
  * clipping of `|e|` before the 12-bit comparators
  * tie breaking in enumeration
  * the symbol code
  * the handshake
* The PED cache keeps one entry per path, each overwritten as the path grows.
  Keeping every visited node would not fit the 16-entry size.
* Not included:
  * the QR decomposition (sorted QR), which produces `R` and `y^ZF`;
  * the LLR generator, which consumes the list;
  * the iterative (turbo) receiver around the detector.

  Their ports are the inputs and outputs of `fsd_top`.
* The eight-nodes-per-cycle variant, mentioned as a possible extension, is not
  built.
* Clock frequency and area (400 MHz, about 30 k gate equivalents in a 0.13 µm
  process for the original) were not verified for this RTL.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

`tb/fsd_ref_pkg.sv` is an integer reference model of the complete decoder. It
uses the same number format and tie rule but shares no code with the RTL.

| testbench | what it checks |
|---|---|
| `tb_bi_unit`, `tb_de_unit`, `tb_di_unit` | thousands of directed and random operands against the model, including full-scale, tie and saturation cases |
| `tb_bi_cache`, `tb_ped_cache`, `tb_path_history_cache` | random writes (group, broadcast, `y_7` load) against a model array |
| `tb_fsd_ctrl` | the schedule cycle by cycle, 30-cycle latency, back-to-back period, and that a `start` while busy is ignored |
| `tb_fsd_top` | 300 traversals at the default parameters |

`tb_fsd_top` uses three kinds of input:

* channel-like `R` with noisy `y`;
* noise-free `y`: the sent vector must come back with PED 0;
* full-scale random data, which drives `b` and the PEDs into saturation.

For every traversal, all 16 candidates and PEDs must match the model, and the
latency must be 30 cycles. The testbench also checks the 30-cycle period
between back-to-back starts. It counts starts from idle, back-to-back starts,
ignored starts, b saturation and PED saturation, and fails if any of them never
happened.

`tb_fsd_detection` runs the decoder on simulated channels. It uses 200 random
4x4 Rayleigh channels at each of 12 dB and 20 dB SNR. A floating-point sorted
QR in the testbench feeds the decoder, and the quantized data also go to an
exhaustive maximum-likelihood search. The testbench checks every PED against
the floating-point squared distance of its candidate. It also requires the ML
vector to appear in the list for at least 80 % of the 20 dB vectors. It prints
the uncoded vector error rates. A typical run gives:

| SNR | vector errors, minimum-PED candidate | vector errors, exhaustive ML | ML vector in the list |
|---|---|---|---|
| 12 dB | 140 of 200 | 134 of 200 | 142 of 200 |
| 20 dB | 10 of 200 | 7 of 200 | 195 of 200 |

To simulate with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/fsd_pkg.sv tb/fsd_ref_pkg.sv tb/tb_fsd_top.sv --top-module tb_fsd_top
    ./obj_dir/Vtb_fsd_top

Swap in another testbench name for a unit test. Only the top and unit
testbenches that use the reference model need `tb/fsd_ref_pkg.sv`.

## Files

| file | contents |
|---|---|
| `rtl/fsd_pkg.sv` | constants (12-bit width, 8 levels, 4 nodes/cycle, 16 paths), symbol code |
| `rtl/fsd_top.sv` | the decoder: units, caches and control wired together |
| `rtl/fsd_ctrl.sv` | level/column counters and schedule |
| `rtl/bi_unit.sv`, `rtl/csa_tree.sv`, `rtl/csa32.sv`, `rtl/rca.sv` | b unit with its carry-save tree and ripple-carry adder |
| `rtl/de_unit.sv` | enumeration unit |
| `rtl/di_unit.sv` | PED unit |
| `rtl/bi_cache.sv`, `rtl/path_history_cache.sv`, `rtl/ped_cache.sv` | the three caches |
| `tb/*.sv` | testbenches and the reference model |

To change the number format, set `FRAC` on `fsd_top`; the reference model's
`FRAC` must match. The group size, the number of levels and the list size are
fixed by the {1,1,1,1,1,1,4,4} distribution, and the datapath assumes them.
They are package constants, not free parameters.
