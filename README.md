# Forward and reverse converters for the residue number system τ+ = {2^(2q+1), 2^q+2^(q-1)−1, 2^q+2^(q-1)+1}

A residue number system (RNS) stores an integer X as its remainders modulo a
few pairwise coprime moduli. Additions and multiplications then run in
narrow independent channels without carries between them. The classic set
{2^q, 2^q−1, 2^q+1} is fast but has a dynamic range of only about 3q bits.
The set used here has the channel widths of its middle moduli, q+1 bits:

    m1 = 2^(2q+1)
    m2 = 2^q + 2^(q-1) − 1 = 3·2^(q-1) − 1
    m3 = 2^q + 2^(q-1) + 1 = 3·2^(q-1) + 1

Its dynamic range is

    D = m1·m2·m3 = 2^(4q+2) + 2^(4q-1) − 2^(2q+1),

which is about 4q+2 bits. Moduli of the form 2^q+2^(q-1)±1 admit parallel-prefix
modular adders about as fast as modulo-(2^q±1) adders. The price is paid at
the edges of the system, in two converters:

* **Forward converter** (binary → residues): a (4q+3)-bit X becomes (x1, x2, x3).
* **Reverse converter** (residues → binary): the Chinese remainder theorem
  brings X back from (x1, x2, x3).

This RTL implements both converters, a channel-wise residue adder, and a top
that chains them: convert two numbers, add them in residue form, convert the
sum back. Everything is combinational and parameterised by `Q`. The default
is Q = 8:

| quantity | Q = 8 |
|---|---|
| m1, m2, m3 | 131072, 383, 385 |
| M = m2·m3 | 147455 = 2^17 + 2^14 − 1 |
| D | 19,327,221,760 (35-bit inputs) |
| channel widths | 17, 9, 9 bits |

## Files

| file | contents |
|---|---|
| `rtl/rns_pkg.sv` | moduli, CRT constants, bit-matrix and tree planning (elaboration-time functions) |
| `rtl/fwd_lut.sv` | table F^k(Z) = \|2^(k(q+1))·Z\|_m |
| `rtl/mod_csa_tree.sv` | carry-save reduction modulo 2^N−δ with re-entrant carries |
| `rtl/mod_adder.sv` | final modular adder (two rows plus one extra carry) |
| `rtl/fwd_conv_mi.sv` | residue generator for m2 or m3 |
| `rtl/fwd_conv.sv` | the three residues of X |
| `rtl/rev_bit_matrix.sv` | weighted-bit matrix of the reverse converter |
| `rtl/rev_conv.sv` | reverse converter |
| `rtl/rns_channel_add.sv` | modular addition in all three channels |
| `rtl/tau_plus_rns.sv` | top: forward, add, reverse |

## Forward converter

Cut X into four slices:

* X3: the top q bits;
* X2, X1, X0: q+1 bits each.

Then

    X = 2^(3q+3)·X3 + 2^(2q+2)·X2 + 2^(q+1)·X1 + X0.

Modulo m1 = 2^(2q+1), the residue is simply the low 2q+1 bits of X.

For m ∈ {m2, m3}, each upper slice is replaced by the residue of its weighted
value, read from a table:

    |X|_m = | F^3(X3) + F^2(X2) + F(X1) + X0 |_m ,   F^k(Z) = |2^(k(q+1))·Z|_m

Each F^k is one table of the composed function, so a single table read sits
on the path. The four (q+1)-bit rows are then reduced modulo m by a
carry-save tree (below) and a final modular adder. Each channel has three
tables:

| table | entries | width |
|---|---|---|
| F^3 (X3 address) | 2^q | q+1 bits |
| F^2 (X2 address) | 2^(q+1) | q+1 bits |
| F (X1 address) | 2^(q+1) | q+1 bits |

For Q = 8 that is 11,520 ROM bits per channel. Table contents are computed
while the design elaborates, so there is no data file.

## Reverse converter: one sum instead of two CRT steps

The reverse converter groups the moduli as {m1, {m2, m3}}. Let M = m2·m3.

Because 2^(2q+1) ≡ 1 − 2^(2q−2) (mod M), the number
μ1 = 9·2^(2q−5) + 1 satisfies μ1·m1 ≡ 1 (mod M). It is the inverse the
New CRT needs for the pair {m1, M}. For the pair {m2, m3},
μ2 = 3·2^(q−2) is the inverse of m3 modulo m2.

Applying the New CRT twice and merging the results gives:

    X  = x1 + 2^(2q+1)·X'
    X' = | A·x2 + B·x3 − μ1·x1 |_M ,   A = |μ1·μ2·m3|_M,  B = μ1 − A

At Q = 8 these constants are μ1 = 18433, μ2 = 192, A = 83160 and B = 82728.
The low 2q+1 bits of X are therefore x1 itself, and the hardware computes
only X' < M. X' is 2q+2 bits wide, because M is slightly larger than
2^(2q+1).

### The bit matrix

Every input bit b of x2, x3 and x1 contributes b·W, where its weight is
W = |coef·2^i|_M. The matrix writes each W as signed binary digits. It
chooses, whichever has fewer non-zero digits:

* plain binary or non-adjacent form (NAF) of W;
* the negation of the binary or NAF form of M−W.

Digits turn into matrix bits as follows:

* A digit +2^j puts b into column j.
* A digit −2^j puts ~b into column j. This leaves a constant −2^j, since −b = ~b − 1.

All constants are summed modulo M into one constant row: the inverted bits'
−2^j, and the −2^(2q−2) that each re-entered tree carry implies (see below).
At Q = 8 the matrix has 152 bits, constant row included, in 17 columns,
with at most 12 per column.

The placement is computed from the weights by `rns_pkg::rev_table`, not
written out by hand. The constant row can reach bit 2^(2q+1); when it does,
that bit goes to the final adder as `HI_CONST`.

## Modular carry-save tree (`mod_csa_tree`)

This is the least conventional part. A carry-save tree reduces a column
matrix to two rows, but modulo M = 2^N − δ rather than as a plain sum.

**Re-entry.** A carry out of the top column has weight 2^N ≡ δ (mod M).
Instead of being dropped or kept, it is added back in the next level at
column 0 and at one more column P, in true or inverted form:

| modulus | N | re-entry of carry c | constant per carry |
|---|---|---|---|
| m2 | q+1 | c at 0, c at q−1 | 0 |
| m3 | q+1 | ~c at 0, c at q−1 | −1 |
| m2·m3 | 2q+1 | c at 0, ~c at 2q−2 | −2^(2q−2) |

An inverted copy leaves a constant behind. The tree does not add that
constant; the producer of the matrix adds it in advance:

* In the m3 forward channel, it is folded into the F^3 table.
* In the reverse converter, it goes into the constant row.

The number of re-entered carries is known at elaboration.

**Level planning.** Levels follow the Dadda heights 2, 3, 4, 6, 9, 13, 19, ….
Each level uses as few full and half adders per column as bring the column,
counting incoming carries and re-entered bits, down to the next height.
`rns_pkg::tree_plan` computes the plan when the module elaborates:

* FA and HA counts per column and level;
* the column heights;
* the number of re-entries.

A generate loop then instantiates it.

**The last carry.** A carry out of the top column in the last level could
only re-enter through one more level. Instead it leaves the tree as the
one-bit output `hi`, with weight 2^N, and the final adder takes it as a third
input.

**Results at Q = 8:**

| tree | levels |
|---|---|
| forward (m2 and m3) | 3 |
| reverse | 7 |

The reverse tree re-enters 8 carries.

## Final modular adder (`mod_adder`)

The adder computes r = |a + b + 2^N·(hi + HI_CONST)|_MOD:

1. It forms the raw sum T once.
2. In parallel, it compares T with every multiple k·MOD that T can reach.
3. It subtracts the largest multiple not above T.

This is the "sum and sum − modulus, then select" adder, widened to as many
multiples as the input range needs. The count, at most four, is worked out
at elaboration from the largest possible T. The same module serves as the channel adder of the
residue datapath, where one correction suffices.

## Top (`tau_plus_rns`)

The top takes operands a and b below D. It outputs:

* the residues of a;
* the residues of a + b, computed channel by channel;
* `z` = |a+b|_D, the reverse conversion of the residue sum;
* `a_back`, a second reverse conversion of a's own residues (a round trip).

There is no clock. Chains of k additions are formed outside the top, by
feeding the sum residues back; `tb_kadd_chain` does this.

## Where this design departs from the paper it follows

* **Reverse bit matrix.** The source's thirteen-row operand table and its
  closed formula for X' could not be reproduced as printed: a numerical check
  failed, and the table repeats two entries. The source itself also notes
  that q ≤ 8 needs unspecified changes. The matrix here is derived from the
  same CRT starting point, X' = |μ1(X23 − x1)|_M, with the signed-digit bit
  placement described above. It is not a transcription of that table. The
  tree depth, seven levels, agrees with the source.
* **Forward tree depth.** The source reports four carry-save levels; the plan
  here needs three at Q = 8.
* **Third adder input.** The source's block diagrams show only two buses
  entering each final adder. Here the last level's top carry (`hi`) is a
  third, one-bit input.
* **Inverted re-entry column.** The source's re-entry identity puts the
  inverted carry at weight 2^(2q−2), while its reduction table's footnote
  names column 2q−1. The identity is followed, and it checks numerically.
* **Adder architecture.** The modular adders are compare/select adders, not
  the parallel-prefix adders the source takes from earlier work, which it
  does not describe.
* **Tree shape.** Column heights and FA/HA counts per level come from the
  planning rule, not from the source's reduction table, so a per-cell match
  is not claimed. The source re-enters seven carries in the reverse tree;
  this one re-enters eight at Q = 8, and passes its last top carry to the
  adder.

## Verification

Each block has a self-checking testbench in `tb/` that compares against
integer arithmetic (`%`) and prints `TB_RESULT checks=… failures=…`.

| testbench | what it checks |
|---|---|
| `tb_fwd_lut` | every address of F, F^2, F^3 for m2 and m3 |
| `tb_mod_csa_tree` | two-row result ≡ matrix + implied constants for the m2, m3 and reverse trees; reverse tree has 7 levels |
| `tb_mod_adder` | random and extreme inputs at 383, 385 and 147455 |
| `tb_fwd_conv_mi`, `tb_fwd_conv` | residues of random and corner 35-bit inputs |
| `tb_rev_bit_matrix` | weighted matrix sum ≡ X' (mod M) |
| `tb_rev_conv` | round trip of random X < D |
| `tb_rns_channel_add` | channel sums |
| `tb_tau_plus_rns` | 20,005 operand pairs at the default Q = 8, end to end |
| `tb_kadd_chain` | 200 chains each of k = 39 and k = 100 additions, converted back |

`tb_tau_plus_rns` also counts how often each mechanism happens and fails if
one never does:

* forward `hi` carry;
* reverse `hi` carry;
* modulus subtraction in the forward and reverse adders;
* channel wrap-around;
* re-entered carries.

Beyond the default, the converters were simulated at other sizes:

* Q = 4, 5 and 6: forward and reverse converters, round trip.
* Q = 16 and 32: reverse converter only.

At Q = 16 the forward tables have 2^17 entries, which is beyond Verilator's
default generate-unroll limit (use `--unroll-limit`). At Q = 32 they would
need 2^33 entries.

### Simulating

Each testbench runs with plain Verilator. List the package first:

    verilator --binary --timing -Irtl rtl/rns_pkg.sv tb/tb_rev_conv.sv --top-module tb_rev_conv
    ./obj_dir/Vtb_rev_conv

The same works for any `tb/tb_*.sv`. Each run takes well under a second.

To change the width, set `Q` on `tau_plus_rns`, `fwd_conv` or `rev_conv`. The
formulas need Q ≥ 3, so that 2^(2q−5) is an integer; Q = 4 is the smallest
size simulated.

Known lint warnings are harmless:

* Unused carry or padding bits (padding rows are zero by construction).
* The replication width of wide zero constants.
* A width extension in the adder's elaboration-time division.
