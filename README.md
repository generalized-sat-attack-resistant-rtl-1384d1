# G-Anti-SAT: a SAT-attack-resistant logic-locking block with tunable corruptibility

Logic locking hides a chip's function behind a secret key: extra key-controlled
logic is inserted so that the circuit computes its intended function only when the
right key is applied. The classic weakness is the oracle-guided SAT attack. The
attacker has the locked netlist and a working chip. They repeatedly ask a SAT solver
for a *distinguishing input* on which two candidate keys disagree. They query the
chip on that input and discard every key that gives the wrong answer. A lock resists
the attack only if the number of such iterations grows exponentially with the input
width.

The earlier Anti-SAT block reaches that bound with an AND tree and a NAND tree. The
price is that every wrong key corrupts exactly one input pattern. Such a low
corruptibility makes the lock easy to approximate (AppSAT) and easy to locate and cut
out (signal-probability-skew removal attacks).

The G-Anti-SAT block in this repository keeps the exponential iteration count and
raises corruptibility. The two function blocks no longer have to be AND/NAND, nor
complements of each other. The only requirement is that every input pattern has at
least one wrong key that *only that input* exposes. The wrong-key sets of different
inputs may otherwise overlap freely. That overlap lets most wrong keys corrupt
2^(n-t) inputs instead of 1, where t is a design parameter.

## Structure

```
            +-----------+     +------------------+
  x[n] --+->| key gates |-L_f>| f  (one K-map    |--f--+
         |  | x ^ k_f   |     |     column)      |     |    +------+
  k_f[n]--->+-----------+     +------------------+     +--->| last |
         |                                                  | gate |--> y
         |  +-----------+     +------------------+     +--->|  G   |
         +->| key gates |-L_g>| g  (the other    |--g--+    +------+
  k_g[n]--->| x ^ k_g   |     |     columns + 1) |
            +-----------+     +------------------+
```

| module          | role |
|-----------------|------|
| `gas_pkg`       | enums for the variant and gate type; constant functions giving true-set sizes, the right-key rule and the corruptibility classes |
| `gas_key_gate`  | one key-gate layer, `L = X ^ K`; optional XNOR gates per bit |
| `gas_f_noncomp` | f of the non-complementary lock |
| `gas_g_noncomp` | g of the non-complementary lock |
| `gas_g_comp`    | g of the complementary lock (f is the same logic inverted) |
| `gas_lock`      | top: two key-gate layers, f and g, and the last gate |

`gas_lock` is purely combinational: it has no clock and no reset. Its output `y` is
meant to be XORed into an internal net of the circuit being protected. With a right
key, `y` is constant (0 for type-0, 1 for type-1), so the host circuit works. With a
wrong key, `y` takes the wrong value on a set of inputs, and that set's size is the
key's *corruptibility*. The host circuit and the key storage are outside this design.

## The K-map view

Everything in the construction comes from one picture. An n-bit function input L is
laid out as a K-map with 2^(n-t) rows and 2^t columns:

* The low n-t bits `L[n-t-1:0]` form the **row** label.
* The high t bits `L[n-1:n-t]` form the **column** label.

### Non-complementary lock (`VARIANT = GAS_NONCOMP`, default)

* **f** is true on exactly one column, `COL`. In logic, f is the AND of the t column
  bits, with polarities taken from `COL`. This gives |F^T| = 2^(n-t).
* **g** is the OR of two terms:
  * g1 covers every column that differs from `COL` in some column bit *other
    than* bit `Q`. That is all columns except `COL` and its neighbour across bit
    `Q`.
  * g2 covers the single *common cell*: the cell of column `COL` in row `CELL`.
    g2 is written as `(L[Q] == COL[Q]) & (row == CELL)` so that it merges with g1.

  This gives |G^T| = 2^n - 2^(n-t+1) + 1.

Why this works:

* **SAT resistance.** f and g share exactly one cell. Because of that, for each
  input X there is a wrong key whose only wrong input is X. The SAT attack must
  therefore use every one of the 2^n inputs as a distinguishing input.
* **Right keys exist.** g leaves out the neighbour column of `COL`. XORing the
  inputs with the keys moves columns around the map, so the keys can move f's
  column onto that unused one. Concretely, `(K_f, K_g)` is a right key exactly when
  the two keys are equal on the column bits other than `Q`, and differ on bit `Q`.
  The row bits are free. This gives 2^(2n-t) right keys.
* **Corruptibility.** A wrong key whose halves `K_f` and `K_g` agree on all column
  bits, bit `Q` included, corrupts 1 input; there are 2^(2n-t) such keys. Every
  other wrong key corrupts a whole column, 2^(n-t) inputs; there are
  2^(2n) - 2^(2n-t+1) such keys.
* **CAS-Unlock.** The two halves of a right key are never equal. So the all-0 and
  all-1 key guesses used by CAS-Unlock are wrong keys.

### Complementary lock (`VARIANT = GAS_COMP`)

* Column `COL` is the *dividing column*.
* **g** is true on every other column, plus the one cell of the dividing column in
  row `CELL`. This gives |G^T| = 2^n - 2^(n-t) + 1.
* **f** = ~g, which gives |F^T| = 2^(n-t) - 1. In hardware, f is a second copy of
  the g logic applied to `L_f`, followed by an inverter.

Right keys are `K_f = K_g`, 2^n of them. Wrong keys corrupt either 2^(n-t) - 1 inputs
(2^(2n) - 2^(2n-t) keys) or 1 input (2^(2n-t) - 2^n keys).

Because `K_f = K_g` is a right key, the complementary lock falls to the all-0 / all-1
guess. The `XNOR_F` / `XNOR_G` masks turn chosen key gates into XNORs. Right keys then
become `K_f ^ XNOR_F = K_g ^ XNOR_G`, which defeats that guess.

### Choosing t

t trades the size of the high corruptibility against how many wrong keys have it:

* **Small t:** a few wrong keys corrupt very many inputs, and most corrupt only one.
  An approximate attack then usually returns a low-corruptibility key.
* **Large t:** most wrong keys are in the high class, but that class corrupts fewer
  inputs.

A medium t balances the two. The default is t = 3, as in the published area tables.

For removal attacks, the skew between f and g is what an attacker looks for. With
t = 2 (non-complementary), the last gate's input probabilities differ by only about
0.25, not the nearly 1 of the AND/NAND Anti-SAT block.

## Type-1 output gate

`LOCK_TYPE = GAS_TYPE1` replaces the AND with an OR, so the correct output is 1. The
type-1 functions are not spelled out in the source. This design uses the complements
of the type-0 f and g, which gives `y = ~f | ~g`. The type-1 design rules are the
type-0 rules with true and false sets exchanged, and this choice meets them. The
right keys stay the same as for type-0.

## Parameters of `gas_lock`

| parameter | default | meaning |
|-----------|---------|---------|
| `N` | 25 | protected inputs (the published corruptibility study uses n = 25) |
| `T` | 3 | column bits; 2..N-1 for the non-complementary lock, 1..N-1 for the complementary lock |
| `VARIANT` | `GAS_NONCOMP` | `GAS_NONCOMP` or `GAS_COMP` |
| `LOCK_TYPE` | `GAS_TYPE0` | `GAS_TYPE0` (AND, correct output 0) or `GAS_TYPE1` (OR, correct output 1) |
| `COL` | 0 | f's column (non-complementary) or the dividing column (complementary) |
| `CELL` | 0 | row of the shared or split cell |
| `Q` | N-T | non-complementary only: the column bit in which the two right-key halves differ |
| `XNOR_F`, `XNOR_G` | 0 | key gates built as XNOR |

The defaults of `COL`, `CELL` and `Q` are this design's own choices. The
construction allows any legal value, and the tests exercise non-default values too.
In a real deployment they would be picked secretly.

The constant functions in `gas_pkg` turn the rules above into code:

* `right_kg()` builds a right key.
* `is_right_key()` tests whether a key is right.
* `high_corruptibility()`, `high_corrupt_keys()`, `low_corrupt_keys()` and
  `right_keys()` give the expected counts.

## Verification

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog. To run
one with Verilator:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv rtl/gas_pkg.sv \
          tb/tb_gas_lock.sv --top-module tb_gas_lock -o sim && ./obj_dir/sim
```

| testbench | what it shows |
|-----------|---------------|
| `tb_gas_key_gate` | XOR and XNOR key gates against a bitwise reference |
| `tb_gas_f_noncomp`, `tb_gas_g_noncomp`, `tb_gas_g_comp` | the 4-bit worked examples (F^T = {0,1,2,3}; G^T = {3, 8..15}; G^T = {0, 8..15}), exhaustive 8-bit checks against set definitions, and random 25-bit checks |
| `tb_gas_lock` | five small configurations (n = 8, t = 3 for both variants; three n = 6 variants covering type-1, t = 1, t = 4, non-default `COL`/`CELL`/`Q` and XNOR gates), each analysed over every key and every input (`gas_lock_analyzer`) |
| `tb_gas_lock_full` | the default 25-bit lock: right keys give y = 0; random keys match a model; full 2^25-input sweeps give 0, 1 and 2^22 wrong outputs for a right key, a low-class key and a high-class key |
| `tb_gas_lock_profiles` | 25-bit locks with t = 2, 3, 8, 15 (non-complementary) and t = 3, 8, 15 (complementary): true-set sizes, the skew of the last gate, and the two corruptibility classes, all over the full input space |

For every key, the exhaustive analysis in `tb_gas_lock` checks four things:

* Every output matches a model built from K-map set membership.
* The right-key rule holds exactly.
* Each wrong key falls in one of the two corruptibility classes.
* The number of keys in each class matches the closed forms above.

It then replays an idealised SAT attack on the recorded truth tables. While two
surviving keys disagree on some input, the attack queries that input and discards
the keys that are wrong there. For every configuration the attack needs exactly 2^n
iterations, and it ends with exactly the right keys left.

## Where this design differs from, or goes beyond, the source description

* **Iteration count.** The published SAT-attack table lists 255 iterations for
  n = 8. The idealised attack here needs 256 = 2^n, which matches the published
  argument that every input must become a distinguishing input. The difference is
  most likely how the attack tool counts its iterations.
* **Average corruptibility.** The published closed forms for average corruptibility
  equal the total corruptibility divided by all 2^(2n) keys, up to a term below 1.
  Averaging over wrong keys only gives a slightly larger value: 27.57 instead of 24
  for n = 8, t = 3, non-complementary.
* **A wrong key in a worked example.** The 4-bit example f = ~l3 & ~l2,
  g = l3 & ~l2 + ~l2 & ~l1 & ~l0 quotes `K_f = 0000, K_g = 0001` as a right key.
  With K_g = 0001, input 0001 gives y = 1. `K_g = 0100` is a right key.
* **A worked example left out.** That same 4-bit example puts only one column in
  g. It is not an instance of the general n-bit construction, which needs 2^t - 2
  columns, so the parameterised modules cannot express it.
* **The 4-bit complementary figure.** Its example puts a whole extra column into
  F^T. It is likewise outside the general construction. The complementary module
  implements the general n-bit form, |F^T| = 2^(n-t) - 1.
* **Type-1 functions** are this design's choice (see above).
* **XNOR key gates** are a countermeasure from other work that the source says can
  be adopted. Here they are an option, off by default.
* **Default variant.** The non-complementary lock is the default because it is
  smaller and is not open to the all-0 / all-1 key guess. The complementary lock is
  one parameter away.
* **Not modelled:** where `y` enters the host circuit, key storage, and any
  structural or functional obfuscation layered on top.
