# Block-LDL matrix preprocessing engine for 64 x 16 massive MIMO

A base station with B antennas that receives U single-antenna users at once
separates them with a linear LMMSE equalizer. Before any data can be
equalized, every new channel estimate H (B rows, U columns, complex) has to be
turned into the inverse of the regularised Gram matrix

    A = H^H H + (N0/Es) I,        result:  A^-1   (U x U, Hermitian)

This "preprocessing" is the expensive, latency-critical part of the receiver:
the inversion has long data dependencies and needs more precision than the
equalization itself. This RTL computes A^-1 for B = 64 and U = 16 in 584 clock
cycles, using three ideas:

1. **One triangular systolic array does two jobs.** It first accumulates
   H^H H row by row, and later, reused, runs the final back substitution.
   Because A is Hermitian, only its upper triangle is computed, so the array
   has (U^2+U)/2 = 136 processing elements.
2. **Block LDL instead of scalar Cholesky/LDL.** A is cut into 2x2 blocks
   and factorised as A = L D L^H. L is block lower-triangular with 2x2
   identity blocks on its diagonal, and D is block diagonal. Every step
   works on a whole 2x2 block, so a 16 x 16 problem has only 8 sequential
   pivot steps instead of 16. Each pivot needs a 2x2 inversion, which is
   done in closed form.
3. **No inverse of L.** From A^-1 = L^-H D^-1 L^-1 it follows that
   L^H X = D^-1 L^-1. On or above the diagonal, the right-hand side equals
   D^-1 (inside a diagonal block) or zero, so the upper triangle of X = A^-1
   follows from L and D^-1 by back substitution alone. L^-1 is never formed.

The rest of this document explains how these pieces are built, with most of
the space on the back substitution (the least obvious part). It also lists
where this implementation departs from the published chip.

## One matrix, step by step

| step | unit | cycles (U=16, B=64) | what happens |
|------|------|---------------------|--------------|
| Gram | systolic array | 64 + 1 | one row of H per cycle; then one cycle adds N0/Es to the diagonal |
| write | array -> register array | 36 | the 36 lower 2x2 blocks of A, one per cycle |
| factorise | BLDL engine | 448 | L, D and D^-1 computed in place in the register array |
| back substitution | systolic array | 32 (= 2U) | upper triangle of A^-1 leaves on the 16 column outputs |

Three more cycles go to hand-over: start, engine start and done. From the
`start` pulse to the `done` pulse takes 65 + 36 + 448 + 32 + 3 = 584 cycles.
Matrices are processed one after the other; steps of different matrices do
not overlap. The published chip reports 65 + 36 + 470 + 32 = 603 cycles, which
is 0.69 us and 1.44 M matrices/s at 870 MHz. At the same clock this RTL needs
0.67 us per matrix.

`prep_ctrl` is the sequencer. It is a plain FSM with the states
IDLE, GRAM, REG, WR, FSTART, FACT, BSUB, DONE.

## Number format

Every real value is a signed 21-bit fixed-point number with 13 fraction bits
(Q7.13: range -64 ... +63.9999, step 1.2e-4). A complex value is 42 bits, and a
2x2 block of four complex values is 168 bits, the width of every block bus.
A row of H is 16 x 42 = 672 bits.

- Products are computed at full width, rounded to nearest and saturated.
  Sums saturate.
- The input rows are expected to be scaled so that their largest entry has
  magnitude one. A diagonal Gram entry is then at most 64, the edge of the
  range. Only a column whose 64 entries all have magnitude exactly one
  saturates.
- The 2x2 inversion returns its result as a mantissa block M and a
  power-of-two exponent alpha, with D^-1 = M * 2^alpha. This keeps small
  pivots from losing all their bits. alpha is applied with a rounded right
  shift or a saturating left shift (`mshift`). It is applied inside the
  product when L is computed (`mmult`).

All helpers are in `prep_pkg`: `sat`, `scale_round`, complex and 2x2 matrix
arithmetic, the register-array address map and the instruction format.

## The systolic array in Gram mode

Processing element PE(m,n) with m <= n holds g_mn. In every Gram cycle, the
element's column broadcasts h_n and its row broadcasts h_m from the current
row of H. The element adds h_n * conj(h_m) to its accumulator. After B rows
the array holds the upper triangle of G = H^H H. One more cycle (`reg_en`)
adds N0/Es to the 16 diagonal elements.

The register array stores the *lower* block triangle, because the
factorisation reads A_ij with i >= j. So the array's read-out multiplexer
(`blk_out`) returns, for block (I,J), the Hermitian transpose of the upper
block (J,I). Diagonal blocks are rebuilt from their upper half. During the
36 write cycles `prep_ctrl` walks the blocks row by row:
(0,0), (1,0), (1,1), (2,0), ...

## Register array

A flip-flop memory of N(N+1)/2 + N = 36 + 8 blocks (N = U/2 = 8):

    address i(i+1)/2 + j        block A_ij (i >= j), later L_ij or D_jj
    address N(N+1)/2 + j        D_jj^-1

The factorisation works in place: L_ij overwrites A_ij, and D_jj overwrites
A_jj. D_jj must be kept because later pivots need it. The array has:

- one write port for the systolic array;
- one read port (combinational) and one write port for the BLDL engine;
- a forward bus that repeats every engine write towards the systolic array
  in the same cycle.

The systolic array listens on that bus during the factorisation and keeps
the L and D^-1 values it will need for back substitution. So no cycles are
spent copying them back. An assertion checks that the systolic-array port and
the engine write port are never used in the same cycle.

## BLDL engine

The block recursion, for j = 0 .. N-1:

    D_jj = A_jj - sum_{k<j} L_jk D_kk L_jk^H
    L_ij = (A_ij - sum_{k<j} L_ik D_kk L_jk^H) D_jj^-1      for i > j

`bldl_engine` is a small processor with four 2x2 arithmetic units:

| unit | operation | latency |
|------|-----------|---------|
| `mmac`  | acc (+)= X Y Z^H, one term L_ik D_kk L_jk^H per issue | 2 |
| `msub`  | A_ij - acc (or A_ij alone when j = 0) | 1 |
| `minv`  | 2x2 inverse as mantissa M and exponent alpha | 4 |
| `mmult` | (A_ij - acc) * M * 2^alpha | 1 |

It also has four operand registers (three for the MMAC, one for the minuend)
and a write-back multiplexer. That multiplexer selects the MSUB result (D_jj),
the shifted inverse (D_jj^-1) or the MMULT result (L_ij).

**Instruction table.** `bldl_ctrl` holds one instruction row per clock cycle
(`instr_t` in `prep_pkg`). Each row has:

- the read address and the operand register it loads;
- enables for the four units, and a "new sum" flag for the MMAC;
- the write address and write source;
- a `last` flag.

The FSM only steps a program counter through the table. The table is not a
data file: the constant function `bldl_lut` builds it during elaboration from
the recursion above, for any N.

**Schedule.** There is one read port, so each MMAC term costs three fetch
cycles: L_ik, D_kk, L_jk. The fetch of term k+1 overlaps the MMAC work on
term k. For one (i, j) pair the schedule is:

    3j cycles      fetch the j MMAC terms (none when j = 0)
    1-3 cycles     fetch A_ij, wait for the sum, MSUB
    i = j: write D_jj and start MINV; four cycles later write D_jj^-1  (5)
    i > j: MMULT, write L_ij                                           (2)

Pairs run strictly one after another. This gives 448 cycles for N = 8
(`bldl_len` in `prep_pkg`).

**Inversion (`minv`).** For D = [a b; c d] the unit forms the complex
determinant Delta = ad - bc at full precision. It then writes
Delta = Dn * 2^s, with the larger of |Re Dn| and |Im Dn| in [1, 2), and
computes 1/Dn = conj(Dn) / |Dn|^2. The real reciprocal comes from three
Newton-Raphson steps x <- x(2 - qx), started at 48/17 - 32/17 q. The last
stage multiplies the adjugate [d -b; -c a] by 1/Dn. The outputs are
M = adj(D)/Dn and alpha = -s. A singular block gives M = 0.

## Back substitution in the systolic array

This part needs the most explanation. It takes exactly 2U cycles.

### What is solved

Write X = A^-1 and use scalar indices 0..U-1. l_jm are the entries of L,
which are zero for j, m inside the same 2x2 block. Row m of L^H X = D^-1 L^-1,
taken at a column n >= m, reads

    x_mn = r_mn - sum_{j > m} conj(l_jm) x_jn

Here r_mn is the (m,n) entry of D_kk^-1 when m and n are in the same block k,
and zero otherwise. The sum needs values below the diagonal (j > n). X is
Hermitian, so those are x_jn = conj(x_nj), taken from column j of the
triangle. Column n therefore needs the finished results of the columns to its
right. This is why the work runs from the bottom-right corner to the
top-left.

### Timing

Number the backward-substitution cycles t = 1 .. 2U.

- **t = 1 (`bs_load`).** Each element inside a diagonal 2x2 block loads r_mn
  into its accumulator. All others clear.
- **t = 2 .. 2U (`bs_en`).** Every element that is still working does one
  multiply-add.

The schedule rests on a single rule:

    in cycle t, column n carries x_jn with j = 2U - n - t

So column n sees x_{U-1,n}, x_{U-2,n}, ... one per cycle, counting down.
Element (m,n) finishes x_mn in the cycle t = 2U - m - n, right after the last
value it needs, x_{m+1,n}, has passed it.

- x_{U-1,U-1} is ready at t = 2, x_{U-2,U-2} at t = 4, and x_00 at t = 2U.
- The results of one anti-diagonal m + n = const appear in the same cycle.

**Values on a column.** A column is a chain of multiplexers (`y_out`). Each
element passes the value from below (`a_in`) up to the element above. In its
own result cycle (`own`), it replaces that value with its accumulator. So a
finished x_jn (j <= n) reaches every element above it in the same cycle.

**Values from the right.** The values x_jn with j > n enter column n at its
bottom, through the multiplexer in front of the diagonal element (n,n). In
cycle t = 2U - n - j, element (n,j) finishes x_nj and drives it onto the top
of column j in that same cycle. The multiplexer takes that top value,
conjugates it, and feeds it into column n. Every column top drives the
multiplexers of all columns to its left. In any cycle, at most one of them
matches.

**Coefficients.** Element (m,n) must multiply the value passing it by
-conj(l_jm). The coefficients of row m enter at the right end of the row: the
coefficient for x_j enters in cycle U - j. They then move one element to the
left per cycle through the elements' b registers. The coefficient reaches
column n in cycle 2U - n - j, exactly when x_jn passes. Only the column index
changes along the way. Coefficients for j in the same block as m are zero.

**Worked example (U = 4, blocks {0,1} and {2,3}).** The cycle in which
each entry finishes is t = 8 - m - n:

    t=1  load: x22, x23, x33 <- entries of D_1^-1; x00, x01, x11 <- D_0^-1; rest 0
    t=2  x33
    t=3  x23       (column 2 receives conj(x23) = x32 from the top of column 3)
    t=4  x22, x13
    t=5  x12, x03
    t=6  x11, x02
    t=7  x01
    t=8  x00

Each x_mn appears on out_data[n] once, in the cycle t = 2U - m - n, with
out_row[n] = m.

**Where the results and the coefficients come from.** The elements capture
the D^-1 entries (right-hand sides) and the negated, conjugated L entries
(coefficients) from the register array's forward bus. They do this while the
factorisation writes them.

**Critical path.** A value moves up a whole column, and may first cross the
diagonal multiplexer, within one cycle. The published chip shows a register on
this path inside each element. With one register per element, a column could
not deliver its values at the rate the 2U-cycle schedule needs. This design
drops that register and keeps the 2U-cycle schedule. The cost is a long
combinational path at U = 16.

## Top-level interface (`prep_top`, parameters U = 16, B = 64)

| port | dir | width | meaning |
|------|-----|-------|---------|
| clk, rst_n | in | 1 | clock, asynchronous active-low reset |
| start | in | 1 | pulse while idle: begin a matrix; clears the array |
| in_valid / in_ready | in / out | 1 | one row of H accepted per cycle when both are high; a missing row stalls the Gram step |
| in_row | in | U x 42 | row of H, each part Q7.13, scaled to largest magnitude one |
| reg_val | in | 21 | N0/Es, read in the cycle after the last row |
| out_valid | out | U | column n carries an upper entry of A^-1 |
| out_row | out | U x 8 | its row index m |
| out_data | out | U x 42 | x_mn, Q7.13 |
| busy, done | out | 1 | matrix in progress; one-cycle pulse at the end |

## Departures from the published design

- **Factorisation length.** It takes 448 cycles, against 470 in the published
  schedule. The published instruction table is not available, so this one
  was derived from the recursion. No work of two (i, j) pairs overlaps.
- **Column register.** The register on the column path of the processing
  element is left out (see Critical path above).
- **alpha.** The inversion unit's exponent output and the two shift units
  exist in the published block diagram, but their meaning is not defined. It
  is read here as D^-1 = M * 2^alpha. The exponent is applied inside the
  MMULT product rather than by a separate shift before it. The result is the
  same, with fewer lost bits.
- **Determinant and Newton-Raphson.** The determinant is complex, not forced
  to be real. The normalisation, the start value, the three iterations and
  the internal widths are this design's own choices.
- **D_jj is written back.** It goes into A_jj's slot, because later MMAC
  terms need it.
- **Gram indexing.** g_mn = sum conj(h_m) h_n, which is the definition
  G = H^H H.
- **Control details.** The fixed-point split Q7.13, rounding and saturation,
  the handshake, the block order and the register-array address map are all
  this design's own choices.
- **Not included.** The chip's input and output SRAMs, used for at-speed
  testing, and its pads and clocking are not part of this RTL. The row input
  and column outputs are top-level ports instead.
- **Reported rates.** The published chip states 1.44 M matrices/s and
  0.7 us both at 870 MHz and at a 420 MHz low-voltage point. Only the
  870 MHz figure agrees with its cycle count. This design needs 584 cycles:
  1.49 M matrices/s at 870 MHz, 0.72 M/s at 420 MHz.

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
one compares the module with a model written independently in the testbench,
mostly in floating point, checks latencies and ends with a
`TB_RESULT checks=.. failures=..` line. A watchdog stops any testbench that
hangs.

- `tb_minv`, `tb_mmac`, `tb_mmult`, `tb_mshift`, `tb_msub`: random blocks
  against floating-point or integer models (relative bounds for the
  inversion, a few LSB elsewhere), saturation at the format limits, the
  bypass and restart controls, and each unit's latency.
- `tb_bldl_ctrl`: runs the whole table. It counts the operations the
  recursion needs. It checks that every L block is read only after it was
  written, that D blocks are read only after they were written, that A
  blocks are read only before they are overwritten, and that each sum is
  restarted by its first term. It also checks the 448-cycle length.
- `tb_bldl_engine` (N = 4): factorises two random regularised Gram matrices
  back to back. Every L_ij, D_jj and D_jj^-1 must match a floating-point run
  of the recursion.
- `tb_pe`, `tb_regarray`, `tb_prep_ctrl`: each mode and port against small
  models. The sequencer test uses the full U = 16, B = 64 and checks every
  step's cycle count, the write addresses and the stall.
- `tb_systolic_array` (U = 8): Gram mode against H^H H + rI. In back
  substitution, random L and D are sent the way the register array forwards
  them. Every upper entry of (L D L^H)^-1 must appear exactly once, within
  tolerance, with x_00 last in cycle 2U.
- `tb_prep_top` (U = 8, B = 16, three matrices) and `tb_prep_full` (the
  defaults, 64 x 16, two matrices): random channel matrices with rows
  normalised as above. They insert an input stall and use several N0/Es
  values. A^-1 is compared with a floating-point Gauss-Jordan inverse of the
  same quantised H. They check every step's cycle count and that every upper
  entry arrives exactly once. They count each mechanism (stall, the four
  engine units, non-zero exponent, conjugate path, back-to-back matrices) and
  fail if one never happened. The observed error is below 1 % of the largest
  |A^-1| entry; the bound checked is 2 %.

Each testbench has also been run against a copy of its module with one
deliberate bug, such as a missing conjugation, an ignored exponent or a sum
that is never restarted. Every one of those runs reported failures.

No bit-error-rate simulation with a channel model is included.

Simulate with Verilator 5. The packages are named first, and the modules
are found through the include paths:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
        rtl/prep_pkg.sv tb/tb_pkg.sv tb/tb_prep_top.sv --top-module tb_prep_top
    ./obj_dir/Vtb_prep_top

Replace `tb_prep_top` with any other testbench name. `-Wno-fatal` keeps
Verilator's style warnings from stopping the build. The full-size run
(`tb_prep_full`) takes a few minutes. To change the size, override `U` and
`B` on `prep_top`. U must be even, and the table and address widths follow
from `N = U/2`. Note that `AW = 8` address bits in `prep_pkg` limit the
register array to 256 blocks.

## Files

    rtl/prep_pkg.sv         types, arithmetic, address map, instruction format
    rtl/prep_top.sv         top level
    rtl/prep_ctrl.sv        step sequencer
    rtl/systolic_array.sv   triangular array, Gram and back substitution
    rtl/pe.sv               processing element
    rtl/regarray.sv         2x2-block register array
    rtl/bldl_engine.sv      factorisation datapath
    rtl/bldl_ctrl.sv        instruction table and FSM
    rtl/mmac.sv rtl/msub.sv rtl/minv.sv rtl/mmult.sv rtl/mshift.sv
    tb/tb_pkg.sv            test helpers (conversion, random data, 2x2 reference math)
    tb/tb_*.sv              one testbench per module, plus tb_prep_full
