# A fan-out-two binary adder with log n + o(log n) depth and linear size

This RTL implements the adder construction from "Binary Adder Circuits of
Asymptotically Minimum Depth, Linear Size, and Fan-Out Two" (Held and Spirkl).
The adder is a combinational circuit of two-input AND/OR gates and repeaters
(identity gates). No gate or input drives more than two gates. Its depth is
log2 n + O(sqrt(log n)) gate levels and its size is O(n) gates.

The usual fast adder with fan-out two is Kogge-Stone. It needs 2 log2 n levels
and about n log2 n prefix gates. Every circuit needs at least log2 n levels.
Older adders that get close to log2 n either have unbounded fan-out
(Krapchenko's, Sklansky's) or super-linear size. This design reaches log2 n +
o(log n) while keeping fan-out two and linear size.

The default configuration is a 4096-bit adder. That is the smallest width for
which the construction states its tighter size bound (9.5 n gates). At this
width the inner part is exactly the small r = k = 2 example used to explain
the construction. The construction is asymptotic: at 4096 bits it is deeper
than Kogge-Stone (see "Depth and size" below). Its purpose is to show the
structure, not to be the fastest 4096-bit adder.

## Signals and conventions

Positions are numbered 1..n from the least significant bit. In every vector,
bit i holds position i+1.

* `x_i = a_i XOR b_i` is the propagate signal and `y_i = a_i AND b_i` the
  generate signal (`pg_prep`).
* For a run of positions s..t: `X_{s,t}` is the AND of x_s..x_t (the run
  passes a carry through). `Y_{s,t}` is 1 if the run produces a carry by
  itself.
* The carry out of position t is `Y_{1,t}`. There is no carry-in. The sum is
  `s_i = x_i XOR c_i`, and the carry-out becomes the top sum bit
  (`sum_stage`).

Everything between `pg_prep` and `sum_stage` is the carry network. It maps
the n pairs (x, y) to the n carries.

## Overall structure

```
a, b ─► pg_prep ─► bk_adder ───────────────────────────────► sum_stage ─► s
                     │ TAU halving levels (prefix_gate)          ▲
                     ▼                                           │
                   mig_adder on N/2^TAU positions                │
                     │  and_prefix_aug  (group propagates)       │
                     │  K rows of mig_gate (group generates)     │
                     ▼                                           │
                   TAU correction levels (bk_out_gate) ──────────┘
```

`fo2_adder` is the top. It has three parameters besides `N`:

| parameter | default for N = 4096 | rule (in `adder_pkg`) |
|---|---|---|
| `TAU` | 8 | ceil(sqrt(log2 N) + 2 log2 ceil(sqrt(log2 N))), at most log2 N - 1 |
| `R` | 2 | ceil(sqrt(log2 (N / 2^TAU))) |
| `K` | 2 | equal to R |
| `NAND_BK` | 0 | 1 builds the halving steps from NAND/NOT gates |

`TAU` halving steps reduce the problem to N/2^TAU = 16 positions. A
multi-input generate adder with radix 2^R = 4 and K = 2 rows solves those 16
positions. Each of the three parameters can be overridden. For example,
`TAU = 0` gives the fastest form, with super-linear size. `bk_adder` stops
elaboration with an error if 2^(R*K) < N/2^TAU.

## The multi-input generate gate (`mig_gate`)

The main idea is a radix-2^R Kogge-Stone adder. Each node combines 2^R groups
instead of 2, so the number of rows drops from log2 n to log2 n / R. Such a
node's result is needed by 2^R nodes in the next row. Fan-out two therefore
requires that each node deliver 2^(R-1) copies, each from its own gate. The
node also must not spend R extra levels on a repeater tree. The gate achieves
both.

Inputs are 2^R pairs. Pair 2^R is the most significant. The gate computes
only the group generate:

```
Y = OR over j of  m_j,   m_j = y_j AND x_{j+1} AND ... AND x_{2^R}
```

It works in three parts:

1. **Suffix products.** A Kogge-Stone AND graph runs on the reversed input
   order. It has R levels. A column with no partner at a level holds a
   repeater. It forms every product x_j AND ... AND x_{2^R}, and each x input
   drives two gates.
2. **Minterms.** One row of AND gates forms m_j from y_j and the suffix
   product starting at j+1. The top minterm is y_{2^R} through a repeater.
   Each y input drives exactly one gate.
3. **OR with built-in copying.** R rows of 2^(R-1) OR gates each. Row l holds
   every OR of 2^l neighbouring minterms, 2^(l-1) times. Copy c of a row-l
   value is the OR of copy (c mod 2^(l-2)) of its two halves from row l-1.
   Each row-(l-1) output then drives exactly two gates. The last row holds
   2^(R-1) copies of Y.

A propagate input is 2R+1 levels from the output and a generate input is R+1
levels. In the adder's last row no copies are needed, so `DUP = 0` replaces
part 3 with a balanced tree of 2^R - 1 OR gates.

## The augmented AND-prefix graph (`and_prefix_aug`)

The generate gates need the group propagates X over runs of 2^(R*l)
positions, l = 0..K-1, for every end position t. Each one is needed 2^R
times. The graph is a plain Kogge-Stone AND prefix graph with two additions:

* A row of repeaters is placed before every block of R levels. The value just
  above such a row is tapped once for output. The repeaters feed the next
  block. No node drives more than two gates.
* Each tap feeds a repeater tree: one root repeater, then R doubling levels,
  for 2^R copies. Each copy is driven by its own repeater.

The last R levels of a full Kogge-Stone graph would only produce runs that
nobody uses, so they are left out. The repeater row in front of them is left
out too.

## The multi-input generate adder (`mig_adder`)

This adder works on NP = 2^(R*K) positions. Before row 1, every y is copied
2^(R-1) times by a repeater tree of depth R-1. Let B = 2^(R*(l-1)). Column t
of row l (l = 1..K) computes the generate of the 2^(R*l) positions ending at
t, from 2^R groups of B positions each:

* Group d (d = 0 .. 2^R-1) ends at column t - d*B. Its generate comes from
  row l-1 and its propagate from AND-prefix block l-1, both at column t - d*B.
* Group d = 0 is the most significant. It enters the gate as input 2^R.
  Group 2^R-1 is the least significant and enters as input 1. A group's
  generate counts only if all more significant groups propagate. Read
  literally, the recursion in the paper numbers the groups the other way
  round, which would mask each group with the propagates of the groups below
  it. This RTL uses the order that the gate's own definition requires.
* If t <= B, the span of row l-1 already starts at position 1. The column
  then only copies row l-1's value, with a repeater tree of depth R-1 (a
  single repeater in the last row).
* Near the low end a gate can have groups that lie below position 1. Their
  inputs are tied to x = 1, y = 0. A generate of 0 contributes nothing, so
  the function is unchanged, and synthesis removes those gates. The paper's
  figure draws such gates with fewer inputs.

Copies are assigned so that every signal drives two gates at most. Group d
uses generate copy d/2 and propagate copy d of its source column. The last
row gives the carries `c[t-1] = Y_{1,t}`.

## Brent-Kung steps (`bk_adder`)

The adder above has about n R^2 2^R gates. To make the size linear, TAU
halving steps wrap it:

* **Halving.** A full prefix gate (`prefix_gate`: AND for the propagate, AND
  plus OR for the generate) merges positions 2i+2 and 2i+1 into one pair. The
  next level has half the positions.
* **Inner result.** The next level, or the `mig_adder` after TAU levels,
  returns the carry out of every even position.
* **Correction.** Each even carry is passed on through a repeater and also
  feeds a reduced gate (`bk_out_gate`). That gate forms the carry out of the
  next odd position as y OR (x AND carry), without a group propagate. The
  carry out of position 1 is y_1.

Corrections never need a group propagate, so the inner adder does not have to
produce one. That is why the generate-only `mig_adder` fits here. The
repeater on each even carry keeps fan-out at two when steps are nested. This
is the variant with about 5.5 n extra gates in total. Each step adds four
levels.

The steps are written as a generate loop over levels, not as a recursive
module.

## NAND/NOT Brent-Kung gates (`nand_prefix_gate`, `nand_out_gate`)

CMOS NAND/NOR gates are faster than AND/OR. The construction can be
rewritten with NAND, NOR and NOT gates only. With `NAND_BK = 1`, the halving
gate becomes NAND/NOT:

* generate: NAND(NOT y_i, NAND(x_i, y_j))
* propagate: NOT(NAND(x_i, x_j))

The correction gate becomes the generate half of that gate (two NANDs and a
NOT). Depth and function are unchanged.

The matching rewrite of the multi-input generate adder is **not**
implemented. That rewrite aligns all gates into rows of alternating parity,
using extra repeaters. Odd rows then become NAND/NOR, even rows NOR/NAND, and
repeaters become NOT gates. With `NAND_BK = 1`, the inner adder stays in
AND/OR form.

## Depth and size

The construction counts repeaters as gates. Its bounds are:

* Inner adder (r = k = 2, 16 positions): k r + 2r + k + 1 = 11 levels,
  assuming the generate inputs arrive r + 2 levels late.
* Each halving step adds 4 levels. For n = 4096 the general bound is
  log2 n + 8 ceil(sqrt(log2 n)) + 6 ceil(log2 ceil(sqrt(log2 n))) + 2 = 58
  levels.
* Size is at most 9.5 n gates for n >= 4096.

The table below gives measured values. Each RTL configuration was flattened
without optimisation, so every repeater disappears, and the longest chain of
two-input gates was counted. The count includes one preparation gate and the
sum XOR. Gates count 1-bit AND/OR/XOR/NOT cells, repeaters excluded.

| configuration | longest gate path | gates | Kogge-Stone carry path + 2 |
|---|---|---|---|
| N = 16, TAU = 0, R = K = 2 | 10 | 237 | 10 |
| N = 64, derived (TAU = 5, R = K = 1) | 22 | 362 | 14 |
| N = 512, TAU = 0, R = K = 3 | 17 | 41,057 | 20 |
| N = 4096, default (TAU = 8, R = K = 2) | 40 | 24,693 | 26 |

Without size reduction (TAU = 0), the design beats Kogge-Stone at 512 bits,
but needs about 80 gates per bit. The linear-size default uses about 6 gates
per bit without repeaters. At 4096 bits, however, it is much deeper than
Kogge-Stone: the eight halving steps add about 32 levels, and log2 n is too
small for the asymptotic gain to show. This matches the construction's own
remark that for small n one would drop the size reduction.

One inconsistency in the source: its closing example gives depth 21 for 2048
inputs with r = 3, k = 4. The depth formula k r + 2r + k + 1 gives 23 for
those values on 4096 columns. Trimming to 2048 columns saves one level, which
gives 22. This RTL builds the circuit, not the formula, so the discrepancy
does not change the RTL.

## What synthesis keeps

Repeaters are continuous assignments to separately named nets. In the RTL
they show exactly where the construction places them. Any synthesis tool
merges them, however. A netlist keeps the logic structure but not the
buffering. Fan-out limits and repeater insertion are then the job of physical
design. The suffix product of all 2^R propagates in each `mig_gate`, and the
padded columns of an inner adder wider than needed, feed nothing. Synthesis
removes them. Lint reports this as an unused bit in `mig_gate`.

## Where this RTL departs from the construction

* **Group order in the multi-input generate adder.** This RTL follows the
  gate's definition, not the recursion as printed (see above).
* **Low-end gates.** Gates that reach below position 1 have constant-tied
  inputs instead of fewer inputs. The function is the same.
* **Copy-only columns.** In a middle row, a copy-only column uses a repeater
  tree of depth R-1 (2^R - 2 repeaters). The construction counts at most
  2^(R-1) - 1 there. This changes neither the function nor the depth.
* **Last repeater row.** The AND-prefix graph's last repeater row would drive
  nothing, so it is omitted.
* **Refinements not built.** Two refinements for widths where sqrt(log2 n)
  is not an integer are not built: choosing R one smaller, and trimming the
  unused upper half of the inner adder so that its last row uses
  2^(R-1)-input gates. Unused columns are padded instead. That costs gates
  but not correctness.
* **Inner adder stays AND/OR.** The NAND/NOR rewrite of the inner adder is
  missing. Only the Brent-Kung steps can be mapped to NAND/NOT.
* **Width.** The default width of 4096 is a choice made for this RTL. The
  construction is stated for every n. `TAU` is capped at log2 N - 1 so that
  at least two positions reach the inner adder.

## Files

| file | content |
|---|---|
| `rtl/adder_pkg.sv` | sizing functions (`tau_for`, `rk_for`, `ceil_sqrt`) |
| `rtl/fo2_adder.sv` | top: N-bit adder, `s = a + b`, N+1 bits |
| `rtl/pg_prep.sv`, `rtl/sum_stage.sv` | propagate/generate and sum bits |
| `rtl/bk_adder.sv` | carry network: halving steps + inner adder |
| `rtl/prefix_gate.sv`, `rtl/bk_out_gate.sv` | halving and correction gates |
| `rtl/nand_prefix_gate.sv`, `rtl/nand_out_gate.sv` | their NAND/NOT forms |
| `rtl/mig_adder.sv` | multi-input generate adder |
| `rtl/mig_gate.sv` | multi-input generate gate |
| `rtl/and_prefix_aug.sv` | augmented Kogge-Stone AND-prefix graph |

All modules are purely combinational, with no clock or reset. Testbenches
apply a vector, wait 1 time unit and compare.

## Simulation

Each testbench is self-checking. It prints `TB_RESULT checks=<n>
failures=<m>` and ends with `$finish`. Build and run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/adder_pkg.sv \
    tb/fo2_adder_tb.sv --top-module fo2_adder_tb -o sim
./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `fo2_adder_tb` | default 4096-bit adder against wide integer addition, 2000 vectors; fails unless odd-position corrections, carries through the inner adder and through its last row, carry-out and a full-width carry all occurred |
| `fo2_workloads_tb` | 512 bits with TAU = 0 and R = K = 3; 32 bits on a padded 512-column and a 64-column inner adder; 1024 bits with NAND/NOT steps |
| `bk_adder_tb` | carry network in six configurations, with and without padding and NAND gates, against a ripple-carry model |
| `mig_adder_tb` | (R,K) = (2,2), (1,3), (3,2), (2,3) against a ripple-carry model |
| `mig_gate_tb` | R = 1, 2, 3, both output forms, exhaustive; all copies must agree |
| `and_prefix_aug_tb` | every copy of every group propagate for three shapes |
| `prefix_gate_tb`, `bk_out_gate_tb`, `nand_prefix_gate_tb` | exhaustive truth tables |
| `pg_prep_tb`, `sum_stage_tb` | preparation and sum bits against integer addition |

The default 4096-bit top takes about 1.5 minutes to compile with Verilator.
Simulation takes well under a second. The workload testbench compiles in
about 2.5 minutes.

## Changing the design

* **Another width.** Set `N`. `TAU`, `R` and `K` follow from the sizing rules.
  `N` must be divisible by 2^TAU. The inner width N/2^TAU is padded up to
  2^(R*K) if needed.
* **Another trade-off.** Set `TAU`, `R` and `K` directly. Fewer halving steps
  give lower depth and more gates. `TAU = 0` gives the pure multi-input
  generate adder. Larger R gives fewer rows and bigger gates.
* **Carry-in.** Not supported. One way to add it is an extra position 0 with
  y_0 = carry-in.
