# Twit-based modulo-(2^n ± δ) RNS multiplier

A residue number system (RNS) splits a large integer into small residues, one per modulus, so
that a wide multiplication becomes many narrow ones with no carries between them. The wider the
choice of moduli, the narrower each channel can be for a given dynamic range. The moduli
2^n − δ and 2^n + δ, with any 0 ≤ δ ≤ 2^(n−1) − 1, give a lot of choice. With n = 5 alone,
eleven of them, together with 2^10, give a dynamic range above 2^64.

This RTL implements the generic modular multiplier for such channels described by Gorgin,
Sadr, Salami and Rahmati ("A Generic Modulo-(2^n ± δ) RNS Multiplier Based on Twit
Representation"). Its central idea is to never form the binary product of the two residues:

* each residue carries a **twit**, one extra bit worth 0 or ±δ. The modular "end-around"
  correction lives in the number code rather than in compare-and-subtract logic;
* each operand is cut into 3-bit groups, and every pair of groups is multiplied *and reduced
  modulo m* by a fixed 6-input truth table;
* the residues are summed in carry-save form, with high bits folded back whenever the sum
  grows too wide;
* a single (n+1)-bit carry-propagate adder at the very end produces the result. Its carry-out
  is absorbed by the twit.

The default build is the paper's 12-channel n = 5 set:
`rns_mul_n5`, moduli {17, 19, 23, 29, 31, 35, 37, 39, 41, 43, 47, 1024}. The channel module
`twit_mod_mul` is parameterised by n, δ and the sign, and is tested at n = 5, 8 and 11.

## 1. The twit code

A channel value is an n-bit word `x` plus a twit bit `t`:

| modulus       | value represented      |
|---------------|------------------------|
| m = 2^n − δ   | x − t·δ  (mod m)        |
| m = 2^n + δ   | x + t·δ  (mod m)        |

Every one of the 2^(n+1) codewords is legal, and most residues have two spellings. For
example, with m = 2^5 − 5 = 27, the value 16 is `10000,0` or `10101,1` (21 − 5). With
m = 2^5 + 5 = 37 it is `10000,0` or `01011,1` (11 + 5). For 2^n − δ the word may even exceed
m. For 2^n + δ the twit is what lets n bits reach the residues from 2^n to m − 1.

Inputs may use any spelling. The output is also just *a* valid spelling, not necessarily the
canonical one. Example: 14 mod 17 comes out as `11101,1`, that is 29 − 15. A consumer that
needs a canonical binary residue must decode it: x ± t·δ, then one conditional correction by m.

## 2. One channel, stage by stage (`twit_mod_mul`)

```
 a,a_tw ─┐   ┌────────────┐  Γ² residues  ┌──────────┐ (S,C) ┌─────────────┐ (S,C) ┌────────────────┐
         ├──►│ twit_ppg   │──────────────►│ csa_tree │──────►│ twit_squeeze│──────►│ twit_final_add │──► p, p_tw
 b,b_tw ─┘   │ (split+PP) │               │ 3:2 rows │       │ (fold+CSA)  │       │ (CL+CSA+CPA)   │
             └────────────┘               └──────────┘       └─────────────┘       └────────────────┘
```

Everything is combinational. There are no registers, clocks or handshakes anywhere in the
design.

### Stage 1: operand splitting

There are Γ = 1 + ⌈(n − 2)/3⌉ groups per operand.

* Group 0 is `{t, x1, x0}`. Its value is x1x0 ± t·δ.
* Group g ≥ 1 is `x[3g+1 : 3g−1]`, weight 2^(3g−1). The top group may have fewer than three
  bits.

For n = 5, Γ = 2: `{t,a1,a0}` and `{a4,a3,a2}`·4.

### Stage 2: partial-product tables (`twit_pp_lut`)

For each pair (γ of A, η of B) the block outputs |gᴬ_γ · gᴮ_η|_m, with both positional weights
already included. The result is a canonical residue. It is n bits wide for 2^n − δ and n + 1
bits for 2^n + δ, because there m − 1 may exceed 2^n − 1. With only six inputs, each block is a
64-entry constant table. The tables are computed at elaboration by a constant function from
(n, δ, sign, γ, η), so they follow any parameter change. There are Γ² tables. They are ordered
`pp[η·Γ + γ]`: g0ᴮ·g0ᴬ, g0ᴮ·g1ᴬ, …

### Stage 3: carry-save reduction (`csa_tree`, `csa32`)

The Γ² residues are summed by levels of 3:2 counter rows until two vectors remain: the
carry-save pair (S, C). Operands are taken three at a time in index order, and leftovers move
up unchanged. For four operands (n = 5) the tree is two cascaded rows, i.e. a 4:2 compressor.

The widths are tracked exactly at elaboration: a row's sum is as wide as its widest input, and
its carry is one bit wider than its second widest input. This gives n + 1 bits for 2^5 − δ and
n + 2 bits for 2^5 + δ.

### Squeezing (`twit_squeeze`, `twit_fold_lut`)

Stage 4 accepts a pair at most n + 1 bits wide. Wider pairs are squeezed step by step, using
2^n ≡ ∓δ (mod m):

1. cut both vectors at bit `CUT = max(n−1, W−3)`;
2. feed the (at most 3 + 3) bits above the cut to a 6-input table that returns the residue
   |2^CUT·(S_hi + C_hi)|_m;
3. add that residue to the two low parts with one 3:2 row.

Each step removes at least one bit. The pair's value changes, but stays congruent modulo m.

| channel     | Γ | products | tree levels | pair after tree | squeeze steps | pair into stage 4 |
|-------------|---|----------|-------------|-----------------|---------------|-------------------|
| 2^5 − δ     | 2 | 4        | 2           | 6 bits          | 0             | 6 bits            |
| 2^5 + δ     | 2 | 4        | 2           | 7 bits          | 1             | 6 bits            |
| 2^8 − δ     | 3 | 9        | 4           | 11 bits         | 1             | 9 bits            |
| 2^8 + δ     | 3 | 9        | 4           | 12 bits         | 2             | 9 bits            |
| 2^11 ± δ    | 4 | 16       | 6           | 15 / 16 bits    | 2             | 12 bits           |

### Stage 4: twit-compatible final addition (`twit_final_add`)

This is the subtle part. The bits of S and C from position P4 upward are given to a fixed
table:

* P4 = n − 1 for 2^n − δ;
* P4 = n − 2 for 2^n + δ, one position lower.

Call their value U. The table rewrites U as an n-bit word V plus a twit t′. V is then added to
the low parts of S and C (bits below P4) with one 3:2 row and one (n+1)-bit adder. The adder's
n low bits are the result word. Its carry-out is worth 2^n, which modulo m is +δ (for 2^n − δ)
or −δ (for 2^n + δ): exactly the opposite of what a set twit is worth in each case. So a
carry-out cancels a set twit, and the result twit is

    p_tw = t′ XOR carry-out

This only works if a carry-out never occurs while t′ = 0. The table guarantees this:

* **2^n − δ:** V = |U + δ|_m and t′ = 1 always. V ≤ m − 1 < 2^n, and the low parts are at most
  2^n − 3, so the sum stays below 2^(n+1). Either there is a carry-out (twit cleared) or there
  is not (twit stays −δ).
* **2^n + δ:** let u = |U|_m. If u ≥ δ, then V = u − δ < 2^n and t′ = 1. Otherwise V = u < δ and
  t′ = 0. In that case the low parts, which use only bits up to n − 3 (this is why P4 is one
  lower here), are at most 2^(n−1) − 2. Together with V < 2^(n−1) they cannot reach 2^n, so
  there is no carry-out.

An immediate assertion in `twit_final_add` checks the rule "carry-out implies t′ = 1" on
every evaluation in simulation.

### Worked example (the paper's, δ = 15)

| step | m = 47: A = 42 = `11011,1`, B = 21 = `10101,0` | m = 17: A = 12 = `11011,1`, B = 4 = `10101,0` |
|------|------|------|
| partial products | 18, 24, 31, 10 | 5, 7, 15, 4 |
| carry-save pair | S = 43, C = 40 (7 bits) | S = 7, C = 24 (6 bits) |
| squeezing | bits 6..4 (010, 010) fold to 17; S = 18, C = 18 | none |
| stage-4 table | bits ≥ 3 give U = 32 → V = 17 (`10001`), t′ = 1 | bits ≥ 4 give U = 16 → V = 14 (`01110`), t′ = 1 |
| adder | 2 + 2 + 17 = 21, no carry-out | 7 + 8 + 14 = 29, no carry-out |
| result | `10101,1` = 21 + 15 = 36 ✓ | `11101,1` = 29 − 15 = 14 ✓ |

The channel testbench checks both examples bit for bit.

## 3. The 12-channel n = 5 multiplier (`rns_mul_n5`)

| index | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | — |
|---|---|---|---|---|---|---|---|---|---|---|---|---|
| modulus | 17 | 19 | 23 | 29 | 31 | 35 | 37 | 39 | 41 | 43 | 47 | 1024 |
| form | 32−15 | 32−13 | 32−9 | 32−3 | 32−1 | 32+3 | 32+5 | 32+7 | 32+9 | 32+11 | 32+15 | 2^10 |

Ports:

* `a_res[i]`, `a_tw[i]`, `b_res[i]`, `b_tw[i]` are the operand codewords of channel i, and
  `p_res[i]`, `p_tw[i]` the product codeword.
* `a_p2`, `b_p2` and `p_p2` carry the 2^10 channel, which is a plain 10 × 10 multiplier
  truncated to 10 bits (`pow2_mod_mul`).

The product of all twelve moduli is 28,620,324,425,937,054,720 ≈ 2^64.6. The channels share
nothing, so the critical path is that of the slowest channel.

## 4. Files

| file | contents |
|------|----------|
| `rtl/twit_pkg.sv` | elaboration-time functions: modulus, group layout, tree and squeezing widths |
| `rtl/twit_pp_lut.sv` | one 6-input modular partial-product table |
| `rtl/twit_ppg.sv` | operand splitting and the Γ² tables |
| `rtl/csa32.sv` | 3:2 counter row |
| `rtl/csa_tree.sv` | carry-save reduction tree |
| `rtl/twit_fold_lut.sv` | overflow-folding table |
| `rtl/twit_squeeze.sv` | squeezing steps |
| `rtl/twit_final_add.sv` | stage-4 table, 3:2 row, adder, twit correction |
| `rtl/twit_mod_mul.sv` | one channel (parameters `N`, `DELTA`, `PLUS`; default 2^5 + 15) |
| `rtl/pow2_mod_mul.sv` | the 2^(2n) channel |
| `rtl/rns_mul_n5.sv` | top: the 12-channel n = 5 multiplier |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_table3_channels` |
| `tb/twit_ref_pkg.sv`, `tb/twit_mul_checker.sv` | testbench reference arithmetic and a per-channel checker |

To change a channel, set `N`, `DELTA` (0 … 2^(N−1) − 1) and `PLUS` on `twit_mod_mul`; all
widths, tables and squeezing steps follow. N must be at least 3. To build a different moduli
set, copy `rns_mul_n5` and edit its `CH_DELTA` / `CH_PLUS` lists.

## 5. Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops by itself. For example,
to run the end-to-end test of the top:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/twit_pkg.sv tb/twit_ref_pkg.sv tb/tb_rns_mul_n5.sv --top-module tb_rns_mul_n5
./obj_dir/Vtb_rns_mul_n5
```

Verilator finds the remaining modules through `-Irtl -Itb`. `-Wno-fatal` keeps lint
warnings from stopping the build. Some block testbenches mix 64-bit reference arithmetic with
narrow signals (`WIDTHEXPAND`). The RTL only warns, under `-Wall`, about carry bits that the
width analysis proves to be zero (`UNUSEDSIGNAL`).

What the testbenches cover:

* `tb_rns_mul_n5` (full size, no parameter changes). It tries all 4096 pairs of codewords on
  all eleven twit channels at once. It also takes 3000 random integer pairs below the dynamic
  range through the RNS, with mixed canonical and redundant spellings, and compares each output
  residue with (X·Y mod M) mod mᵢ. It counts squeezing folds, carry-out twit corrections,
  twit-0 conversions, twit inputs and redundant outputs, and fails if any count is zero.
* `tb_twit_mod_mul` tries all codeword pairs for m = 47, 17, 25, 27, 29, 31, 33, 35, plus the
  two worked examples.
* `tb_table3_channels` runs 20,000 random products on each of the n = 8 channels (δ = ±3, ±9,
  ±127) and the n = 11 channels (δ = ±3, ±9, ±1023).
* The unit testbenches check each table exhaustively, and check the tree, squeeze and final
  stage on random and corner pairs. They also check the intermediate rows of the worked
  example.

## 6. Relation to the paper

These parts follow the paper:

* the twit code;
* the group layout and Γ;
* 6-input modular partial products that include the positional weights;
* carry-save reduction of the Γ² products;
* folding of overflow bits with ≤ 6-input tables, accumulated in carry-save form;
* the stage-4 split at bit n − 1 (2^n − δ) or n − 2 (2^n + δ), with a single adder and a
  carry-out twit correction;
* the n = 5 moduli set.

The partial products, carry-save pairs, fold value, stage-4 table outputs and final results of
the paper's worked example are all reproduced.

Choices made here where the paper gives only the function, or disagrees with itself:

* **Stage-4 table encoding.** The paper does not give the table. The rule in section 2 was
  chosen so that the twit correction is one XOR. For 2^n + δ the paper speaks of an "(n+1)-bit
  double-MSD" table output. This design uses a plain n-bit output and leaves the n − 2 column
  of the low parts empty. As a result, the intermediate 3:2 row of the paper's m = 47 example
  comes out as 10001 / 00100 here instead of 00001 / 10100. The adder input sum (21) and the
  result are the same.
* **Squeezing target.** The general description says to squeeze until the pair has at most
  n + 2 bits. The n = 5 case study, however, squeezes the 7-bit (n + 2) pair of 2^5 + δ. This
  design follows the case study: the target is n + 1 bits.
* **Squeezing cut.** The split equation cuts at bit n, but the worked example folds from bit
  n − 1. This design folds from bit n − 1, and for wider pairs three bits per vector per step.
  The paper leaves the size of each step open.
* **Table-input counts.** The paper's block count lists the stage-4 table with 2λ + 2 / 2λ + 4
  inputs. Here it has 4 / 6 inputs for n = 5, because the pair entering stage 4 is n + 1 bits,
  not n + 2. The squeezing row adds one 3:2 row for 2^n + δ beyond the paper's count of λ + 1.
* **Reduction tree.** Only 3:2 rows are used. For n = 5 they form the paper's 4:2 compressor.
  Larger trees are plain Wallace-style levels.
* **The 2^10 channel** is not described in the paper. Here it is a truncated binary multiplier.
* **No pipelining.** The paper reports combinational delays only, and this design adds no
  registers.

## 7. Not included

* Forward (binary-to-RNS) and reverse (CRT) converters. The paper only names them.
* The twit modular adder from the authors' earlier work, which the system-level study pairs
  with this multiplier.
* The baseline multipliers the paper compares against.
