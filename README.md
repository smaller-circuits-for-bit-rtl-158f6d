# Bit addition with fewer gates

Many arithmetic circuits reduce to one problem: given a set of bits, each
with a weight 2^L, output the binary value of their weighted sum. Counting
the ones in a word (SUM_n), adding two numbers (ADD_n) and summing the
partial products of a multiplier (MULT_n) are all instances. The classic
solution reduces every column with Full Adders (five gates each, removing
one bit) and Half Adders. This design builds the same function with a
different block, the *Modified Double Full Adder* (MDFA). With it, a bit
adder with n input bits and m output bits needs at most **4.5n − 2m**
two-input gates, against about 5n for Full Adders. That saves close to 10%
whenever n is much larger than m.

Everything here is combinational. There is no clock, no reset and no state.
Outputs follow inputs after the gates' propagation delay. Sizes below are
counts of two-input gates of any type (XOR, AND, OR, AND with an inverted
input, and so on). This is the metric the construction is optimised for.

## Paired bits

The central trick is an encoding. Two bits p and q of the same weight are
often carried as the pair **(p, p ⊕ q)** instead of (p, q). Their sum is then
available for free, and the carry p ∧ q is one gate away: `p & ~(p ^ q)`.
Blocks that consume and produce pairs in this form save gates at each hand-over.

* `pair_ha` is a Half Adder on a pair. The sum is the stored parity (no
  gate), and the carry is `u & ~x` (one gate).
* `pair_fa` is a Full Adder on a pair plus one plain bit. It costs four
  gates instead of five, because the pair's XOR is already computed.
* `mdfa` adds a pair (x1 ⊕ x2, x2), a plain bit x3 and a pair (x4, x4 ⊕ x5).
  It outputs a sum bit b0 of weight 2^i and a *pair* (a1, a1 ⊕ b1) of weight
  2^(i+1), so that x1+…+x5 = b0 + 2(a1 + b1). It uses eight gates, where two
  chained Full Adders use ten:

  ```
  g2 = x2 ^ x3       g3 = x12 | g2      g4 = x12 ^ x3
  a1 = g3 ^ g4       g6 = x4 ^ g4       g8 = g6 & ~x45
  b0 = x45 ^ g4      a1b1 = g3 ^ g8
  ```
* `mdfa_prime` is MDFA with the plain bit removed (two pairs in, six gates).
  It starts a chain when a layer has no spare plain bit.

`half_adder` (2 gates) and `full_adder` (5 gates) are the textbook blocks.
They are used only by the logarithmic-depth variant.

## The bit adder (`bit_adder`)

`bit_adder` takes the column heights as a parameter array `CNT[W]`: `CNT[L]`
input bits have weight 2^L. The inputs arrive as one vector `x`, column by
column, least significant column first. The schedule is computed while the
design is elaborated, and the netlist is then fixed.

1. **Pairing.** In every column, all bits but possibly one are grouped into
   pairs, at one XOR per pair. When the height is odd, the first bit of the
   column is the one left unpaired.
2. **Layer reduction, from the least significant column up.** Let l be the
   number of bits a layer holds, counting each pair as two. The layer is
   reduced to one output bit by a chain chosen by l mod 4:

   | l mod 4 | chain                                               |
   |---------|-----------------------------------------------------|
   | 0       | MDFA' on two pairs, then k−1 MDFA                   |
   | 1       | k MDFA, each reusing the running plain bit          |
   | 2       | pair_ha on one pair, then k MDFA                    |
   | 3       | pair_fa on a pair and the plain bit, then k MDFA    |

   Here k = ⌊l/4⌋. Each MDFA or MDFA' sends one ready-made pair to the next
   column. A pair_ha or pair_fa sends a single carry c instead. If the next
   column has a plain bit b, the carry is paired with it as (b, b ⊕ c), at
   the cost of one XOR. Otherwise c becomes that column's plain bit. Hence a
   column never holds more than one plain bit.
3. The chain's last plain bit is the column's output bit `y[L]`.

The constant functions in `bit_adder.sv` walk through this schedule. They
export the gate count `GATES` and the number of blocks of each kind
(`N_MDFAP`, `N_MDFA`, `N_HA`, `N_FA`, `N_CPAIR`, `N_PAIR`). The testbenches
check these numbers against published sizes:

| function             | gates | Full Adder design |
|----------------------|-------|-------------------|
| SUM_7                | 19    | 20                |
| SUM_16               | 59    | 63                |
| SUM_31               | 119   | 130               |
| SUM_127              | 543   | 600               |
| SUM_511              | 2263  | 2510              |
| SUM_2047             | 9167  | 10180             |
| ADD_n, n = 2…99      | 5n−3  | 5n−3              |
| MULT_40 (with ANDs)  | 8539  | 9280              |
| MULT_80 (with ANDs)  | 34679 | 37760             |

An optional parameter `YW` narrows the output to the sum modulo 2^YW. It
can also zero-extend the output. The multipliers use it.

### A pitfall: the constant in MDFA'

MDFA' is often described as MDFA with its plain input tied to **1**. In a
SUM_n circuit, though, a block that adds a constant 1 at every layer
produces wrong counts. Tying the input to **0** gives the same six gates,
and only that choice makes the 59-gate SUM_16 circuit correct. `mdfa_prime`
therefore computes the MDFA with x3 = 0. This was verified exhaustively.

## Multipliers

`mult_mdfa` is the direct n × n multiplier. It forms the n² partial
products `a[i] & b[j]` and gives them to one bit adder whose column c has
min(c+1, 2n−1−c) bits. Its size is n² + GATES: 8539 gates at n = 40.

`karatsuba_mult` splits each operand at H = ⌊n/2⌋ and makes three recursive
multiplications:

```
z0 = al·bl     z2 = ah·bh     z1 = (al+ah)·(bl+bh)
a·b = z2·2^(2H) + (z1 − z0 − z2)·2^H + z0
```

The recursion stops below `BASE` = 20 bits, where `mult_mdfa` takes over.
At the default n = 40, this gives one split into 20-bit halves. The halves
split once more into 10- and 11-bit MDFA multipliers. The 21-bit middle
product splits into 10/11/12-bit multipliers.

All additions are bit additions. The operand sums al + ah and bl + bh are
two-row bit adders. The whole recombination is **one** bit adder of width
2n that sums z0, z2, z1, the bitwise complements of z0 and z2, and one
constant column vector. The constant holds:

* the +1 of each two's complement (−z = ~z + 1);
* the ones that extend ~z0 and ~z2 up to the width of the middle window.

The result is taken modulo 2^(2n). This scheme is a design choice: the only
requirement is that the combination uses additions and subtractions. As a
result, the circuit (about 7,800 cells after a generic synthesis) is not
meant to match published Karatsuba+MDFA sizes gate for gate (7155 at n = 40).
The recursion shape and the switch-over at 20 bits are the standard ones.

## Logarithmic depth (`log_depth_bit_adder`)

The bit adder above has depth linear in n, because each column waits for
the carries of the one below it. `log_depth_bit_adder` computes the same
function in depth O(log n):

1. While some column is taller than three bits, every column is reduced in
   parallel by as many Full Adders as fit. Each stage cuts the tallest
   column to about two thirds.
2. One final stage puts a Full Adder on each column of three and a Half
   Adder on each column of two, which leaves at most two bits per column.
3. A Brent–Kung prefix adder (`brent_kung_adder`, a generate/propagate
   up-sweep and down-sweep) adds the two remaining rows.

The schedule (`NST` stages, column heights per stage) is computed at
elaboration. The variant that uses MDFA instead of Full Adders inside the
parallel stages is **not** built. It would be somewhat smaller, but its
arrangement of pairs across parallel stages is not worked out here. Sizes
of this module are therefore those of the Full Adder form. For 31 inputs, a
generic synthesis gives 139 cells, against 130 for the linear-depth counter
(whose 119 two-input gates grow by the inverters that the full binary basis
would absorb).

## Top level (`bitadd_top`)

The top places the three circuit families side by side on independent
ports:

| port           | width    | meaning                                    |
|----------------|----------|--------------------------------------------|
| `cnt_in`       | SUM_N    | bits to count (SUM_N = 31)                 |
| `cnt_out`      | 5        | number of ones, minimum-size MDFA counter  |
| `cnt_fast_out` | 5        | the same number, logarithmic-depth counter |
| `mul_a`        | MULT_N   | multiplicand (MULT_N = 40)                 |
| `mul_b`        | MULT_N   | multiplier                                 |
| `mul_p`        | 2·MULT_N | product, Karatsuba over MDFA multipliers   |

The shared constant `KARATSUBA_BASE` and the block-kind enum live in
`bitadd_pkg`.

## Verification

Each module has a self-checking testbench in `tb/`. Each one ends by
printing `TB_RESULT checks=<n> failures=<n>`.

* The gates and the pair blocks are tested exhaustively.
* `bit_adder_tb` checks eleven column shapes, exhaustively where the input
  is at most 12 bits and with random vectors otherwise. It also checks their
  gate counts and output widths.
* `mult_mdfa_tb` is exhaustive at 5 × 5 and random at 40 × 40, and checks
  the 8539-gate size.
* `karatsuba_mult_tb` runs three configurations: the default (n = 40), an
  odd split (n = 23), and 6 × 6 with a 4-bit base, exhaustively.
* `brent_kung_adder_tb` and `log_depth_bit_adder_tb` compare against plain
  addition. The log-depth test also runs three sizes from the published
  log-depth table: a 320-input counter, a 160-bit addition and the 10 × 10
  multiplier shape.
* `workloads_tb` runs SUM_511 and SUM_2047, and ADD_n for every n from 2 to
  99, checking each size. `mult_workload_tb` does the same for MULT_80.
* `bitadd_top_tb` runs the top at its default sizes. It drives counter
  inputs of every population count and random multiplier operands. It also
  counts, through the hierarchy, that every mechanism of the construction
  occurs: MDFA', MDFA, pair_ha, pair_fa, carry pairing, Karatsuba splits,
  MDFA base multipliers and log-depth stages. A mechanism that never occurs
  is a failure.

To run one with Verilator, for example:

```
verilator --binary --timing --assert --top-module bitadd_top_tb \
    -y rtl -y tb +libext+.sv rtl/bitadd_pkg.sv tb/bitadd_top_tb.sv
./obj_dir/Vbitadd_top_tb
```

The lint warnings that remain (`-Wall`) fall into four groups:

* unused parameters, and unused bits of constant-function arguments;
* function locals whose names shadow module-level names;
* the log-depth adder's unused upper slots;
* one warning about the recursive multiplier, explained in the header of
  `karatsuba_mult.sv`.

## Changing sizes

* `bit_adder #(.W(w), .CNT(c))` accepts any column profile. Pass `CNT` as a
  named `localparam int C[w]` array, since some tools reject an inline
  pattern here.
* `mult_mdfa #(.N(n))` and `karatsuba_mult #(.N(n), .BASE(b))` accept any
  operand width. With `BASE` ≤ n the recursion goes deeper.
* Elaboration cost grows with size because the schedule is computed by
  constant functions. A 2047-input counter or an 80-bit multiplier takes
  minutes to compile in Verilator.
