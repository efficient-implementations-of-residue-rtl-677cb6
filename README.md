# Residue generators mod 2^n+1 with diminished-1 output, and a shared-logic bi-residue generator mod 2^n±1

A residue number system (RNS) processor starts by cutting each binary input
`X` into residues, one per modulus. Moduli of the form 2^n+1 are cheap, but
their residues span `0 .. 2^n`, which takes n+1 bits. Arithmetic mod 2^n+1 is
therefore usually done in **diminished-1 (D1)** form: an n-bit value equal to
the residue minus one, plus a separate bit that flags zero. Such datapaths need
their inputs in D1 form from the start.

This RTL computes the D1 residue directly from a p-bit binary input. It has no
normal-to-D1 converter at the end. The main idea is to first reduce `X` modulo
**2^(2n)−1**. That modulus is the product (2^n−1)(2^n+1). So one carry-save tree
can serve both 2^n+1 and 2^n−1. That tree never inverts a signal, so it adds no
correction constant. The small final block mod 2^n+1 is the same for every
input width p, and its built-in constants cancel exactly. A second final block
on the same tree outputs gives `|X| mod 2^n−1`. The result is a **bi-residue
generator**: one tree costing `p − 4n` full adders is shared by both
conjugate moduli.

The design is purely combinational. Every module's parameters default to
n = 3 and p = 18, so the moduli are 7 and 9 and the input is 18 bits wide.
Tested sizes go up to n = 16 with p = 256.

---

## 1. The output format: diminished-1 words

For modulus 2^n+1, `res_p1_d1` is an (n+1)-bit word `{z, m}`:

| residue `R = |X| mod 2^n+1` | `z` | `m` (n bits) |
|---|---|---|
| `R = 0`                | 1 | `0…0` |
| `1 ≤ R ≤ 2^n`          | 0 | `R − 1` |

So `R = (not z) + m`. Read as one (n+1)-bit unsigned number, the D1 word
equals `|X − 1| mod 2^n+1`. Zero maps to `2^n`, which is `1 0…0`. The
hardware relies on this: it computes `|X − 1|` directly.

The 2^n−1 output `res_m1` is an ordinary residue in `0 .. 2^n−2`. It never
uses the all-ones code, which also stands for zero mod 2^n−1.

## 2. Why the constants cancel (the part worth reading twice)

Split the input into `q = ceil(p / 2n)` blocks `D_j` of 2n bits each, least
significant first. Zero-pad the top block. Because `2^(2n) ≡ 1 (mod 2^(2n)−1)`:

```
|X|_(2^2n − 1) = |D_0 + D_1 + … + D_(q−1)|_(2^2n − 1) = |D_C + D_S|_(2^2n − 1)
```

A CSA tree with end-around carry (EAC) produces the two 2n-bit vectors `D_C`
and `D_S`. Both 2^n−1 and 2^n+1 divide 2^(2n)−1, so either residue of `X` can
be taken from `D_C + D_S`. Split each vector into an upper and a lower half
(`H`, `L`). Since `2^n ≡ −1 (mod 2^n+1)`:

```
|X|_(2^n+1) = |D_CL − D_CH + D_SL − D_SH|_(2^n+1)
```

Three facts about arithmetic mod 2^n+1 turn this into hardware:

1. **Subtracting by inversion.** `−B ≡ not(B) + 2`, because
   `not(B) = 2^n − 1 − B`.
2. **A CSA row with inverted EAC.** A row of n full adders maps `a + b + c` to
   a sum `s` and a carry vector `cy`. The top carry has weight 2^n, which is ≡ −1.
   Write `−cy[n−1]` as `not(cy[n−1]) − 1`. The top carry can then re-enter at
   bit 0 *inverted*:
   `a + b + c ≡ s + {cy[n−2:0], not cy[n−1]} − 1`. Each such row contributes −1.
3. **The D1 adder.** Add `x + y` with carry-out `c`, and feed `not c` back in
   as the carry-in. The result `t = x + y + not(c)` equals `|x + y + 1|`
   mod 2^n+1, with `0 ≤ t ≤ 2^n`.

Now count the constants along the datapath:

```
|X| = |D_CL + not D_CH + 2 + D_SL + not D_SH + 2|          (two inversions:   +4)
    = |d1 + d2 − 1 + not D_SH + 4|                         (row 1:            −1)
    = |d3 + d4 − 1 + 3|                                    (row 2:            −1)
    = |d3 + d4 + 2|
|X − 1| = |d3 + d4 + 1| = t                               (D1 adder adds exactly +1)
```

So the D1 adder's output *is* the D1 word of `X`, and no correction is needed.
None of this depends on p. The mod 2^(2n)−1 tree only rotates carries and
never inverts anything. That is the difference from the classic approach. The
classic approach negates every odd-numbered n-bit block. It then needs a
correction constant that depends on p. For modulus 9 that constant is 8, 6
and 2 for p = 16, 17 and 18. `tb/tb_example_mod9.sv` runs those three widths
through this design with no change.

The mod 2^n−1 side is simpler, because `2^n ≡ 1 (mod 2^n−1)`:
`|X|_(2^n−1) = |D_CH + D_CL + D_SH + D_SL|_(2^n−1)`. There are no inversions
and no constants.

## 3. Datapath

```
 x[P-1:0] ──► zero-extend to q·2n bits, cut into D_0 … D_(q−1)
                     │
        csa_tree_mod2k_m1 (W = 2n, Q = q)      shared: (q−2)·2n full adders
        Wallace tree of csa_eac rows, carry rotated left by one (EAC)
                     │
                D_C, D_S (2n bits each)
          ┌──────────┴──────────────────────────────┐
          │ mod 2^n+1 (moma4_mod2n_p1_d1)           │ mod 2^n−1 (moma4_mod2n_m1)
          │  csa4_mod2n_p1:                         │  csa_tree_mod2k_m1 (W = n, Q = 4):
          │   row 1 csa_ieac(D_CL, ~D_CH, D_SL)     │   two EAC rows on D_CL, D_CH, D_SL, D_SH
          │   row 2 csa_ieac(d1, d2, ~D_SH)         │  adder_mod2n_m1:
          │  d1_adder_mod2n_p1(d3, d4)              │   prefix adder, carry-in = G | P,
          │   prefix adder, carry-in = not G        │   all-ones result cleared to 0
          ▼                                         ▼
   res_p1_d1 = {z, m}                           res_m1
```

Module hierarchy (`biresgen_mod2n_pm1` is the top):

```
biresgen_mod2n_pm1
├── resgen_mod2n_p1_d1         p-input generator mod 2^n+1, D1 output; exports D_C, D_S
│   ├── csa_tree_mod2k_m1      q-operand CSA tree mod 2^(2n)−1   (the shared part)
│   │   └── csa_eac            one W-bit CSA row with end-around carry
│   └── moma4_mod2n_p1_d1      4-operand adder mod 2^n+1 with D1 output
│       ├── csa4_mod2n_p1      two inverted-EAC CSA rows
│       │   └── csa_ieac
│       └── d1_adder_mod2n_p1  parallel-prefix D1 adder
│           └── prefix_gp      Sklansky prefix network
└── moma4_mod2n_m1             4-operand adder mod 2^n−1
    ├── csa_tree_mod2k_m1      (W = n, Q = 4)
    └── adder_mod2n_m1         end-around-carry prefix adder
        └── prefix_gp
```

`rns_pkg` holds the elaboration-time arithmetic:
- `num_blocks(p, w)` gives q.
- `csa_levels(q)` and `ops_at_level(q, l)` give the tree shape.
- `csa_full_adders(q, w)` gives the full-adder count.
- `DEF_N` and `DEF_P` hold the default sizes.

The mod 2^n+1 generator `resgen_mod2n_p1_d1` can be used on its own. Leave
its `dc`/`ds` outputs unconnected.

### The shared CSA tree

`csa_tree_mod2k_m1` reduces Q operands three at a time. Each level turns every
group of three into two through a `csa_eac` row. One or two leftover operands
pass through unchanged. After `csa_levels(Q)` levels, two vectors are left.
Each row costs W full adders and removes one operand, so the tree uses
`(Q − 2)·W` full adders. For the bi-residue generator, W = 2n. When p is a
multiple of 2n, that is `p − 4n`. These are the full adders saved compared
with two separate trees. The special cases:
- `Q = 2` (p ≤ 4n): the tree is empty, and the design is just the two final
  blocks.
- `Q = 1`: gives `ds = D_0`, `dc = 0`.

### The final adders

Both final adders share one structure:
- bitwise generate `g = x & y` and propagate `p = x ^ y`;
- a Sklansky prefix network (`prefix_gp`) for the group terms
  `G[i:0]` and `P[i:0]`;
- one more level that injects the end-around carry-in into every carry,
  `c[i] = G[i−1:0] | P[i−1:0] & cin`.

They differ as follows:

- **mod 2^n+1 (D1):** `cin = not G[n−1:0]`. The zero flag is `z = P[n−1:0]`.
  Every bit propagates exactly when `x + y = 2^n − 1`, and only then is the
  result `t = 2^n`, the D1 code of zero. In that case all sum bits come out 0.
  The carry out `G[n−1:0]` is also a port, `cout`.
- **mod 2^n−1:** `cin = G[n−1:0] | P[n−1:0]`. This folds `x + y = 2^n − 1` to
  0 instead of all ones. The only other way to get all ones is
  `x = y = 2^n − 1`. That sum, `2^(n+1) − 2`, is also ≡ 0, so a final n-input
  AND clears it. The output therefore has a single zero code.

## 4. Parameters and sizes

| parameter | where | default | meaning |
|---|---|---|---|
| `N` | all n-bit modules, the top | 3 | n: the moduli are 2^N−1 and 2^N+1. Must be ≥ 2 (checked at elaboration). |
| `P` | `resgen_mod2n_p1_d1`, top | 18 | input width p. Any P ≥ 1. |
| `W`, `Q` | `csa_tree_mod2k_m1` | 6, 3 | operand width and count of the tree |

Derived sizes at the default: q = 3 blocks of 6 bits and one CSA row of six
full adders (= p − 4n). The mod 2^n+1 path has 2·3 more full adders and the
mod 2^n−1 path 2·3 more. Each adder is a 3-bit prefix adder.

Ports of the top `biresgen_mod2n_pm1`:

| port | dir | width | meaning |
|---|---|---|---|
| `x` | in | P | binary input |
| `res_m1` | out | N | `|x| mod 2^N−1`, in 0 .. 2^N−2 |
| `res_p1_d1` | out | N+1 | D1 word `{z, m}` of `|x| mod 2^N+1` |

## 5. Timing

There are no registers, clocks or handshakes. The outputs are valid one
propagation delay after `x` changes. The critical path, in full-adder and
prefix-operator delays, is:
- `csa_levels(q)` full adders through the shared tree;
- then two full adders through the mod 2^n+1 CSA rows;
- then the prefix adder: one g/p level, `ceil(log2 n)` prefix levels, the
  carry-in level and the sum XOR.

The mod 2^n−1 path is about as long. It adds the final AND. An application
that needs a throughput target adds pipeline registers around this block, for
example between the shared tree and the two final adders.

## 6. What comes from the method, and what is this implementation's choice

The method fixes:
- the block partitioning;
- the shared mod 2^(2n)−1 CSA tree with end-around carry;
- the split into halves with `2^n ≡ ∓1`;
- the two inverted-EAC CSA rows and their order (`D_CL, ~D_CH, D_SL`, then
  `~D_SH`);
- the D1 adder relation `t = x + y + not(c)`;
- the D1 output format;
- the mod 2^n−1 channel equation.

This implementation chooses:

- **Final adder insides.** The method only asks for a D1 adder of a known
  published type. Here it is a Sklansky prefix adder with one extra
  carry-injection level, and its zero flag is the group propagate. The
  mod 2^n−1 adder is built the same way.
- **Tree shape.** The tree is Wallace-style, with three operands per row and
  the leftovers forwarded. Its full-adder count is the `(q−2)·2n` that the
  sharing argument assumes. The depth is logarithmic in q.
- **Zero code mod 2^n−1.** The output has a single zero code, which costs the
  final AND (§3).
- **Range of p.** Any p is accepted. Descriptions of the method differ here:
  one asks for at least four 2n-bit blocks, another for any p ≥ 4n. The
  algebra holds for every q, so nothing is excluded. For p ≤ 4n the circuit
  collapses to the final adders.
- **Padding.** The top block is padded to a full 2n bits, that is with
  `2qn − p` zeros.
- **Default sizes.** n = 3 and p = 18 come from the modulus-9 example that
  motivates the design. The method itself has no preferred size.
- **Exported `dc`/`ds`.** The mod 2^n+1 generator exports the tree outputs,
  so the bi-residue generator is built around it rather than beside it.
- **Assertions.** Two assertions state output invariants for simulation: a
  D1 zero word has a zero magnitude, and the mod 2^n−1 residue is never all
  ones. Synthesis ignores them.

`moma4_mod2n_p1_d1` leaves the D1 adder's `cout` port open. The lint notes
this as an empty pin. The port exists so that testbenches can observe the
carry.

## 7. Verification

Every testbench checks itself. Each compares outputs with references
computed by plain wide-integer `%` on the input, not through any carry-save
structure. Each ends by printing `TB_RESULT checks=<n> failures=<n>`. Each
paces one input per clock and has a cycle-count watchdog.

| testbench | what it runs |
|---|---|
| `tb_biresgen_mod2n_pm1` | the top at its defaults (n = 3, p = 18), all 2^18 inputs, both outputs. It counts each mechanism and fails any never exercised: EAC out of the shared row, both values of each inverted EAC, both D1-adder carry-outs, the zero flag, a zero mod 2^n−1 residue, the all-ones fold. |
| `tb_biresgen_wide` | random inputs at (n, p) = (4, 16) with an empty tree, (5, 33) with a padded top block, and (16, 256) with q = 8 and four tree levels. It also counts EACs per tree level. |
| `tb_example_mod9` | moduli 7 and 9 at p = 16, 17, 18, each exhaustive. It also checks that the p = 18 tree costs p − 4n full adders. |
| `tb_resgen_mod2n_p1_d1` | the mod 2^n+1 generator: default size exhaustive, plus (3, 12), (4, 37), (8, 64) and (16, 200). It also checks `|dc + ds| = |x|` mod 2^(2n)−1. |
| `tb_csa_tree_mod2k_m1` | tree shapes (W, Q) = (6,3), (6,7), (8,4), (4,13), (5,2), (5,1) |
| `tb_csa4_mod2n_p1`, `tb_moma4_mod2n_p1_d1`, `tb_moma4_mod2n_m1` | n = 3 exhaustive, plus a wider n at random |
| `tb_d1_adder_mod2n_p1`, `tb_adder_mod2n_m1` | n = 3 and n = 8 exhaustive, plus a wider n at random |

Every testbench passes. Each also fails when its module is replaced by a
deliberately broken copy. For example, forcing the D1 adder's carry-in to 1
instead of feeding back the inverted carry-out fails about half of that
adder's checks.

Running one with Verilator from the project root:

```sh
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/rns_pkg.sv tb/tb_rns_ref_pkg.sv tb/tb_biresgen_mod2n_pm1.sv \
    --top-module tb_biresgen_mod2n_pm1
./obj_dir/Vtb_biresgen_mod2n_pm1
```

Substitute any other testbench name. The packages must come first on the
command line; `-y` finds the rest. Each testbench finishes in well under a
second.

To build other sizes, set `N` and `P` on the top,
e.g. `biresgen_mod2n_pm1 #(.N(8), .P(64))`. `tb_biresgen_wide` shows how to
check a new size.
