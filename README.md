# Residue arithmetic from small truth tables

A residue number system (RNS) holds an integer as its remainders modulo a set of
pairwise co-prime moduli p_1 … p_m. Additions and multiplications then run on
short residues, independently for each modulus, and a final conversion rebuilds
the integer modulo M = p_1·…·p_m. What makes such a machine expensive is the
conversion, and in particular the operation X mod P for a long X and an arbitrary
(not 2^k ± 1) modulus P.

This RTL implements a method for X mod P and for A·B mod P that uses no divider
and no memory. The input is cut into short subvectors. The weight of each
subvector modulo P, `X_i · (2^offset mod P) mod P`, depends only on the few bits
of X_i, so it is a small Boolean function with a fixed truth table. The
table outputs are added, which gives a much shorter number congruent to X. This
is repeated until the value is below 2P, and one compare and subtract finishes
the job. Everything is combinational. Around these units sits a complete RNS
datapath: forward conversion, one adder/multiplier per modulus, and
Chinese-remainder reconstruction.

## The fold: one step of X mod P

With δ = bits(P−1), the width of a residue, X is split as X = (X_k, …, X_2, X_1)
with δ-bit subvectors, X_1 least significant. Then

    X ≡ X_1 + Σ_{i≥2} ( X_i · (2^{δ(i−1)} mod P) mod P )   (mod P)

`mod_fold` computes the right-hand side. X_1 is passed on unchanged. Every
other subvector drives its own `mulmod_rom`, a truth table with δ inputs and δ
outputs whose contents are fixed by P and the subvector's position. The terms go
into an adder tree. For a 400-bit X and P = 4051 this means one 12-bit field and
33 twelve-input tables, and the sum is at most 137,745 (18 bits).

Example, 18-bit X and P = 47 (δ = 6): 2^6 mod 47 = 17 and 2^12 mod 47 = 7, so
one fold gives X_1 + (X_2·17 mod 47) + (X_3·7 mod 47) ≤ 63 + 46 + 46 = 155.

## The chain: how many folds, how wide

`xmodp` strings folds together. The hardest part of the design is choosing how
many folds to build and how wide each one is. Both are fixed at elaboration by
worst-case arithmetic in `rns_pkg`:

* `fold_bound` gives the largest value a fold can output. The low field adds at
  most min(2^LOW − 1, input bound). A subvector that can reach v_max adds at
  most min(P − 1, v_max · (2^offset mod P)).
* `num_folds` keeps adding folds as long as three things hold: the word is
  wider than the low field, its bound is still at least 2P, and one more fold
  would lower the bound. Each fold's output width is bits(bound).
* The last stage compares the result with P and subtracts P when it is not
  smaller. If the bound were still at or above 2P (only possible when LOW is
  much smaller than δ), this stage becomes a ladder that subtracts P·2^j for
  j = J … 0.

The resulting chains for the sizes in the published comparison:

| X bits | P | folds | worst case after each fold | last stage |
|---|---|---|---|---|
| 18 | 47 | 3 | 155, 97, 80 | one compare |
| 400 / 500 | 461 | 3 | 20751 / 25754, 971, 562 | one compare |
| 400 / 500 | 977 | 3 | 39087 / 48847, 1999, 1070 | one compare |
| 400 / 500 | 2011 | 2 | 74407 / 92497, 3379 / 3712 | one compare |
| 400 / 500 | 4051 | 2 | 137745 / 170145, 5580 / 5940 | one compare |

The bounds are conservative because they ignore which values are actually
reachable. An exact search could sometimes remove a fold, but the result
would not change.

## Modular multiplication

`modmul` computes A·B mod P for operands of 6 to 12 bits. A and B are cut into
3-bit subvectors A_1…A_D and B_1…B_D. Every pair (A_i, B_j) drives one
`pair_mulmod_rom`, a table with 6 inputs that returns
A_i·B_j·2^{3(i+j−2)} mod P. The D² outputs are summed into S_temp. A second
iteration reduces S_temp: bits [2:0] are kept as they are, and each higher
3-bit group goes through a table for 2^{3k} mod P. This is an `xmodp` with
LOW = SUB = 3. The final compare/subtract follows.

With P = 47, A = 45 and B = 15 (A = 101 101, B = 001 111), the partial products
are 35, 40, 45 and 38, so S_temp = 158. The second iteration gives
6 + 24 + 34 = 64, and 64 − 47 = 17. The testbench checks all three values
inside the unit. For 12-bit operands (D = 4) the unit has 16 tables. When one
more fold or one more subtraction is needed, the bound computation adds it.

## The RNS datapath

```
 in_x[0..N-1] ─► rns_forward ─► reg ─► rns_channel (mod p_1) ─┐
  (XW bits)      N·m xmodp          ─► rns_channel (mod p_2) ─┤─► reg ─► rns_reverse ─► reg ─► y
 in_op ───────────────────────────► ─► …                     ─┘           (CRT, mod M)
```

* `rns_forward` contains one `xmodp` for each operand and modulus. With the
  defaults (two 400-bit operands, moduli 461, 977, 2011, 4051) it holds the
  four 400-bit circuits of the published comparison, twice.
* `rns_channel` computes, for one modulus, either the sum (`modadd`) or the
  product (a chain of `modmul`) of the operand residues. The choice comes from
  `in_op` (`rns_pkg::rns_op_e`).
* `rns_reverse` computes y = (Σ S_i·C_i) mod M with
  C_i = M_i·(M_i^{-1} mod p_i) and M_i = M/p_i. Each S_i is cut into 4-bit
  subvectors. Each subvector drives a 16-row table holding S_i,k·C_i·2^{4k} mod M,
  so the products use the same technique as the rest. The sum of the 12 terms
  is reduced by an `xmodp` with P = M.
* The default M is 3,669,186,634,717, a 42-bit number. `y` equals
  (x_1 op x_2) mod M. Larger results wrap around, as in any RNS.

**Timing.** All arithmetic is combinational. `rns_top` puts a register after
each of the three steps, so one operation can enter per clock. An operation
sampled with `in_valid` at clock edge t is on `y`/`out_res` with `out_valid`
after edge t+2, so it is sampled by the consumer at edge t+3 (latency 3). The
reset `rst_n` is synchronous and active low. It clears only the valid bits, so
operations in flight are dropped. Data registers load only when their stage is
valid.

## Parameters and limits

| module | parameter | default | meaning |
|---|---|---|---|
| `xmodp` | `XW`, `P` | 400, 4051 | input width and modulus |
| `xmodp`, `mod_fold` | `LOW`, `SUB` | bits(P−1) | unreduced low field, subvector width |
| `xmodp`, `mod_fold` | `XMAX` | 0 | largest input value, 0 = all bits free |
| `modmul` | `P`, `W`, `SW` | 47, 6, 3 | modulus, operand width, subvector width |
| `rns_top` | `XW`, `N`, `MODULI`, `SW`, `RSUB` | 400, 2, {461,977,2011,4051}, 3, 4 | operand width, operand count, moduli, multiplier and reconstruction subvector widths |

* Constants are 64-bit, so M must stay below 2^63. Each table needs input
  bits + bits(P) ≤ 64; the tables report an elaboration error otherwise.
* The number of moduli is `rns_pkg::NUM_MODULI` (4). To change it, edit the
  package constant and `DEFAULT_MODULI` together. The moduli must be pairwise
  co-prime.
* `rns_channel` expects residues below its modulus, which `rns_forward`
  guarantees. `modmul`, `modadd` and `xmodp` accept any input value.

## How the tables are written

`mulmod_rom` and `pair_mulmod_rom` describe their truth tables by formula:
`y = (x·C) mod P` over a constant C and a narrow x. They are not listings of
rows. This keeps elaboration fast (the default top has about 150 tables of up to
12 inputs per operand), and simulation evaluates the formula directly. A
synthesis tool receives a function of at most 12 inputs. Flattening it into a
minimised two-level or multi-level form is left to that tool. The published
method instead writes out each table and minimises it with a two-level
minimiser. That realisation is not part of this RTL. Area and frequency
therefore depend on how well the synthesis tool minimises these functions.

## Where this RTL departs from the published description

* **Reduced partial products.** Every table output is below P. This follows
  the published truth-table description (δ inputs, δ outputs, X·2^i mod P). The
  published 18-bit worked example instead bounds the first sum by 1575, using
  unreduced products, and its later bounds (447, 148, 54) are not consistent
  with either reading. The intermediate values here are therefore smaller
  (155, 97, 80). The number of iterations is the same (three folds, then one
  compare).
* **Final compare.** The text says to subtract P when the value is *greater*
  than P. Here the test is *not smaller*, so that X = P gives 0.
* **Multiplier weights.** The multiplier's formula prints the weight as
  2^{m(i+j−2)·3}. The worked examples use 2^{3(i+j−2)} for 3-bit subvectors,
  and that is what is built. 2- and 4-bit subvectors are possible through `SW`.
* **Moduli.** The published comparison uses P = 461, 977, 2011 and 4051, while
  its text speaks of 10- to 12-bit moduli (461 has 9 bits). The four printed
  values are used, and they also serve together as the RNS moduli set.
* **Own additions.** These are not in the publication: the adder's
  construction, the op select, the Chinese-remainder constants and tables of
  `rns_reverse`, the pipeline registers, valid and reset, the 2-operand
  default, and the fold-count and ladder rules.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares the module
against arithmetic done independently in the testbench and prints
`TB_RESULT checks=N failures=M`:

* `mulmod_rom_tb` checks the X·9 mod 13 table row by row and a 12-bit table
  exhaustively. The published copy of the mod-13 table swaps the outputs of
  rows 0 and 1; the testbench expects 0·9 = 0 and 1·9 = 9. It also checks the
  table against the published minimised sum-of-products cover of it, which
  matches on all 13 rows.
* `pair_mulmod_rom_tb` checks the four partial products of 45·15 mod 47 and
  every input pair of three tables.
* `mod_fold_tb` checks all 2^18 inputs of the P = 47 example against
  X_1 + X_2·17 mod 47 + X_3·7 mod 47.
* `xmodp_tb` checks the P = 47 example exhaustively, and 400-bit/4051 and
  500-bit/461 on corner and random values. `xmodp_workloads_tb` covers all
  eight published sizes (400 and 500 bits × four moduli).
* `modmul_tb` checks S_temp = 158, S_temp_2 = 64 and the result 17, then all
  6-bit pairs mod 47, all 9-bit pairs mod 461 and random 12-bit pairs mod
  4051.
* `modadd_tb`, `rns_channel_tb`, `rns_forward_tb` and `rns_reverse_tb` use
  corner and random values at the default sizes.
* `rns_top_tb` runs the whole datapath at its default size. It issues about
  400 operations, mixing additions and multiplications with operands of 20, 41
  and 400 bits, some back to back and some with idle cycles. It checks `y`,
  every residue and the 3-cycle latency. It also resets the pipeline with two
  operations in flight and checks that they are dropped. It counts each of
  these events and fails if any never occurs.

To run a testbench with Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/rns_pkg.sv tb/rns_top_tb.sv --top-module rns_top_tb
./obj_dir/Vrns_top_tb
```

Each testbench builds in under a minute and runs in about a second.

Not verified: timing and area after synthesis. The published comparison gives
574–636 MHz and 5,759–8,931 cells on a 28 nm library, and neither figure has
been reproduced with this RTL.
