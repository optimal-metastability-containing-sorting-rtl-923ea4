# Metastability-containing sorting of Gray-code values with a parallel prefix tree

A time-to-digital converter or a clock synchroniser reads a counter that may
be changing at the exact moment it is sampled. If the counter is
Gray-coded, at most one bit is caught in transition. That bit may then be
metastable: neither a clean 0 nor a clean 1, for an unbounded time. The
reading is still almost perfect. It lies between two neighbouring codewords,
and whichever way the bad bit resolves, the value is one of those two.

This RTL sorts such readings without first waiting for them to resolve.
Its basic element is a comparator `twosort(B)`. It takes two B-bit Gray
strings, each with at most one metastable bit, and returns their maximum
and minimum. The outputs are never more metastable than they must be. If
every way of resolving the input bits gives the same output bit, that bit is
stable. Otherwise it is metastable. No synchroniser, clock or memory element
is involved: the whole design is combinational logic made of ordinary CMOS
gates, and its correctness is argued for worst-case metastable behaviour.

The main idea: comparing two Gray strings bit by bit, from the most
significant bit down, is a four-state finite-state machine. Its transition
function, extended to metastable values, is still associative. So all
intermediate states can be computed with a parallel prefix tree. This gives
a comparator with O(B log B) gates and O(log B) depth. A sorting network
built from these comparators sorts n such readings.

## Signals with three values

Every wire carries a value of Kleene's three-valued logic: 0, 1 or M
(metastable/unknown). A standard CMOS gate already behaves that way:

* A controlling stable input fixes the output: 0 on an AND or NAND, 1 on an
  OR or NOR.
* Otherwise, any M input makes the output M.
* An inverter maps M to M.

The reason is the transistor level. A conducting transistor is a small
resistance and a blocking one a large resistance. A transistor with a
metastable gate voltage can be anything in between. If a stable input
already disconnects (or connects) the output path, the metastable
transistor cannot change the result.

A gate built this way computes the *metastable closure* of its Boolean
function: the output is stable exactly when all resolutions of the M inputs
agree. For a network of gates this is not automatic. An AND-OR multiplexer
`sel ? x : y` with `sel = M` and `x = y = 1` gives M, although both
resolutions give 1. The circuit must be designed so that the closure of
every output survives composition. That is what the operators below do.

**Simulation model.** A two-state simulator cannot show M on one wire, so
every logical wire is two rails, `tern_t = {may1, may0}`:

| value | may1 | may0 |
|---|---|---|
| 0 | 0 | 1 |
| 1 | 1 | 0 |
| M | 1 | 1 |

On this encoding the Kleene gates are plain Boolean equations on the
rails. For example, AND gives `may1 = a.may1 & b.may1` and
`may0 = a.may0 | b.may0`. This makes the model exact and synthesizable. The
encoding `{0,0}` never occurs.

Every gate of the design is an instance of `kleene_gate` (INV, AND, OR,
NAND, NOR). The structure of the RTL is therefore the gate netlist. The
physical circuit replaces each `tern_t` by one wire and each `kleene_gate`
by one standard cell. The two rails exist only to make metastability
visible in simulation.

## Valid strings and their order

`rg_B(x)` is the B-bit binary-reflected Gray code of x. Bit 1 is the most
significant, and index 1 is the leftmost bit in all RTL arrays. A *valid
string* is either:

* a codeword `rg(x)`, or
* the superposition `rg(x) * rg(x+1)`. It equals both codewords where they
  agree and is M in the one bit where they differ.

There are 2^(B+1) - 1 valid B-bit strings. They are totally ordered:

    rg(0) < rg(0)*rg(1) < rg(1) < rg(1)*rg(2) < ... < rg(2^B - 1)

Under this order, max and min of two valid strings are again valid strings.
They equal the metastable closure of max and min over all resolutions.
`twosort` must output exactly this max and min. Both testbench reference
models compute them by brute force: they enumerate resolutions, and they
rank the strings independently.

Shorter values fit a wider comparator. Prefixing zeros preserves the Gray
code (`rg_B(x) = 0 rg_(B-1)(x)` for small x), so a 12-bit reading can be
fed to a 16-bit sorter.

## Comparing Gray strings: a four-state machine

This section is the heart of the design. Read the pairs `g_i h_i` of two
stable Gray strings from the most significant bit down. The comparison
needs only four states:

| state `s` | meaning |
|---|---|
| 00 | prefixes equal, even number of 1s so far: the rest compares in normal order |
| 11 | prefixes equal, odd number of 1s: the rest is *reflected*, so the order is reversed |
| 10 | decided: g > h |
| 01 | decided: g < h |

The state starts at `s^(0) = 00`. The transition `s <> (g_i h_i)` is:

| s \ input | 00 | 01 | 11 | 10 |
|---|---|---|---|---|
| 00 | 00 | 01 | 11 | 10 |
| 11 | 11 | 10 | 00 | 01 |
| 01 | 01 | 01 | 01 | 01 |
| 10 | 10 | 10 | 10 | 10 |

In state 00 the input is its own next state. A common 1 enters the
reflected half, and a difference decides the order. In state 11 everything
is mirrored. The decided states absorb everything.

Output bit i of (max, min) depends only on the previous state and the
current pair:

| `s^(i-1)` | max bit | min bit |
|---|---|---|
| 00 | g_i OR h_i | g_i AND h_i |
| 11 | g_i AND h_i | g_i OR h_i |
| 10 | g_i | h_i |
| 01 | h_i | g_i |

The transition is associative: `(s <> a) <> b = s <> (a <> b)`, where
two input pairs compose like a state. So the states `s^(i)` are prefix
"sums" `d_1 <> d_2 <> ... <> d_i` of the input pairs.

### Why this survives metastability

With a metastable input bit the states become strings over {0,1,M}.

It might seem enough to compute only the final state (one tree instead
of a prefix tree) and derive every output bit from it. That is wrong
under metastability. Take `g = 0M10` and `h = 0010`:

* The state runs 00, 00, `M0`, `1M`, `1M`.
* Bit 2 from the final state `1M` would give max/min = `MM`.
* The correct bit 2, from the state `00` before it, is `M0`.

So every intermediate state `s^(i-1)` is needed. This is why a prefix
computation is used.

Two facts make a prefix tree correct anyway:

1. **Operator.** `<>_M`, the metastable closure of `<>`, is again
   associative on {0,1,M}^2 pairs. Because valid strings carry at most one
   M, the closure of the prefix `s^(i)` equals the `<>_M`-prefix of the
   inputs. So it can be computed in any bracketing.
2. **Output.** `out_M`, the closure of the output table, applied to
   `s^(i-1)_M` and `g_i h_i`, gives exactly bit i of the closure of
   max/min.

The hard part is step 1. The closure of an associative operator is
generally *not* associative. It holds here because of the structure of the
four states and of valid inputs.

Both closures are realised by writing each output bit as the sum of all its
prime implicants. A two-level AND-OR form with every prime implicant
computes the Kleene closure.

| operator | bit 1 | bit 2 |
|---|---|---|
| transition `r = s <>_M b` | `s1 (~s2 + ~b1) + ~s2 b1` | `s2 (~s1 + ~b2) + ~s1 b2` |
| output `o = out_M(s, b)` (max bit, min bit) | `b1 (b2 + ~s2) + b2 ~s1` | `b2 (b1 + s1) + b1 s2` |

### The xmux cell

All four formulas have the shape `y (x + sel2) + x sel1`. This is one cell,
`xmux`, built from two ORs and two ANDs. With `sel1 = ~sel2` it is a
multiplexer. The extra `x` inside the first OR keeps the consensus term
`x y`. As a result, a metastable select with `x = y` still gives a stable
output, which a normal multiplexer does not.

`diamond_m` and `out_m` are each two `xmux` cells plus inverters:

| bit | sel1 | sel2 | x | y |
|---|---|---|---|---|
| `<>_M` bit 1 | b1 | ~b1 | ~s2 | s1 |
| `<>_M` bit 2 | b2 | ~b2 | ~s1 | s2 |
| `out_M` max bit | ~s1 | ~s2 | b2 | b1 |
| `out_M` min bit | s2 | s1 | b1 | b2 |

Each operator costs one inverter level plus three gate levels.

## The prefix tree (`ppc`)

`ppc #(N, K)` computes `p[i] = d[0] <> ... <> d[i]` for all i < N. Index i
holds input pair d_(i+1). It is a recursive module with two patterns.

**Left pattern** (Ladner-Fischer step, two operator levels):

1. Combine neighbours `d_(2i-1) <> d_(2i)`.
2. Solve the half-size problem recursively; call its outputs `P`.
3. Fill in the gaps: `pi_(2i) = P_i` and `pi_(2i+1) = P_i <> d_(2i+1)`.

If N is odd, the last input goes to the sub-problem on its own.

**Right pattern** (one operator level):

1. Split at `H = 2^(ceil(log2 N) - 1)`.
2. Solve the left H inputs with one left-pattern step around a
   depth-optimal `PPC(H/2)`.
3. Solve the remaining N - H inputs with a depth-optimal `PPC(N-H)`.
4. Combine every right-hand output with the last left-hand output:
   `pi_(H+i) = pi_H <> pi'_i`.

This unbalanced split keeps the left part a full power of two. That is how
a non-power-of-two width (B - 1 = 15 for B = 16) stays at
`ceil(log2 N)` levels.

The parameter K sets how many left-pattern steps come first, before the
depth-optimal recursion takes over.

| K | depth (operator levels) | size |
|---|---|---|
| 0 (default) | `ceil(log2 N)` | for N = 2^b: `2^(b+2) - F(b+5) + 1` operators, where F are the Fibonacci numbers (F(1) = F(2) = 1) |
| larger | `ceil(log2 N) + K` | drops towards about 2N |

The operator count at K = 0 is slightly below 4N. In every case the
function does not change; the exhaustive bench checks this for every K.
For B = 16 and K = 0, `ppc` has 15 inputs and 4 operator levels.

**Fan-out.** The construction also has a refined variant with constant
fan-out. It adds buffers and duplicates operators, and it keeps the same
asymptotic depth and size. This RTL builds the plain variant only. The
largest fan-out is in the right pattern: the last left-hand output drives
up to N - H operators. That changes neither the function nor a zero-delay
simulation. In silicon, that node needs buffering, which synthesis normally
inserts.

## The comparator (`twosort`)

`twosort #(B, K)` connects these parts:

* The pairs `g_i h_i` for i = 1..B-1 feed `ppc #(B-1, K)`, which produces
  the states `s^(1)..s^(B-1)`.
* `s^(0)` is the constant 00.
* Each of the B `out_m` cells turns `s^(i-1)` and `g_i h_i` into bit i of
  `gmax` and `hmin`.

Depth is `ceil(log2(B-1)) + K` operator levels plus one output level.

A worked example at B = 9:

    g   = 1 0 1 0 1 0 1 1 0      = rg(411)
    h   = 1 0 1 M 1 0 0 0 0      = rg(415) * rg(416)
    max = 1 0 1 M 1 0 0 0 0
    min = 1 0 1 0 1 0 1 1 0

The states `s^(1) .. s^(9)` are:

| i | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 |
|---|---|---|---|---|---|---|---|---|---|
| `g_i h_i` | 11 | 00 | 11 | 0M | 11 | 00 | 10 | 10 | 00 |
| `s^(i)` | 11 | 11 | 00 | 0M | M1 | M1 | 01 | 01 | 01 |

Step by step:

* **Bits 1 to 3.** The common 1s enter and leave the reflected half.
* **Bit 4.** The M turns the state into `0M`, meaning "equal, or g < h".
* **Bits 5 and 6.** The state is `M1`, meaning "reflected-equal, or
  g < h".
* **Bit 7.** Both readings of `M1` resolve on the pair 10 to "g < h"
  (state 01). From then on the state is stable again.

The output cells get the rest right:

* Bit 4 of max is `0 OR M = M`, and bit 4 of min is `0 AND M = 0`.
* From bit 8 on, h is copied to max and g to min.

## Sorting networks (`mc_sort_net`, the top)

Each `twosort` computes exactly max/min in a total order. So the 0-1
principle applies: any comparator network that sorts integers also sorts
valid strings when built from `twosort`.

`mc_sort_net #(NET, B, K)` builds one of four networks:

| NET | inputs | comparators | depth |
|---|---|---|---|
| `NET_SORT4` | 4 | 5 | 3 |
| `NET_SORT7` | 7 | 16 | 6 |
| `NET_SORT10C` | 10 | 29 (fewest comparators) | 8 |
| `NET_SORT10D` (default) | 10 | 31 (least depth) | 7 |

The comparator lists are well-known optimal networks, written out in
`mc_pkg::net_comp`. They were checked with the 0-1 principle on all 2^n
binary inputs.

Comparator c reads the channel vector left by comparator c-1 and writes a
new one. Untouched channels pass straight through, so the netlist stays
acyclic in every tool's view. The output `y[0]` is the smallest value and
`y[NIN-1]` the largest.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `mc_sort_net` | `NET` | `NET_SORT10D` | network |
| | `B` | 16 | bits per value |
| | `K` | 0 | left-pattern steps in every comparator's prefix tree |
| `twosort` | `B`, `K` | 16, 0 | |
| `ppc` | `N`, `K` | 15, 0 | |
| `kleene_gate` | `OP` | `K_AND` | gate function |

The defaults are the largest configuration the construction was laid out
and evaluated in: a depth-optimal 10-input network of 16-bit comparators
with `K = 0`. Networks for 4, 7 and 10 inputs with B = 2, 4, 8 and 16 were
the evaluated set. Each is one parameter setting of the top.

## How far it can be trusted, and where it departs from the construction

Each cell is checked against tables and brute-force closures. The
reference models never look at the RTL; they compute from the definitions
(Gray decoding, enumeration of resolutions, FSM tables).

* `kleene_gate`, `xmux`, `diamond_m`, `out_m`: exhaustive over {0,1,M}.
  The checks include the associativity of `diamond_m` over all 729
  triples, and every cell of the published operator tables.
* `ppc`: random inputs in every pair value, against a sequential fold, for
  14 (N, K) combinations, plus a published 8-input example.
* `twosort`: all valid pairs at B = 4, and the published 4-bit and 9-bit
  examples. The exhaustive bench covers every valid pair at B = 8 and
  B = 10 for every K, and 200 000 random pairs at B = 12. All 67 M pairs
  at B = 12 were not simulated.
* `mc_sort_net`: all four networks at every width of the evaluated grid
  (B = 2, 4, 8, 16), with metastable operands, several metastable operands
  per vector and metastable ties. The default configuration also runs end
  to end.

Known departures and choices:

* **One published table cell.** The output-operator table prints
  `out_M(M0, M0) = 0M`. The closure, the prime-implicant formulas and the
  gate circuit all give `M0`. The state `M0` means "g > h or undecided"
  and the input is g = M, h = 0, so max = M and min = 0. The RTL follows
  the formulas, and the testbench expects `M0`.
* **No fan-out bounding.** The constant-fan-out variant is not built.
  See the fan-out note in the prefix-tree section.
* **No transistor-level or library optimisation.** This includes moving
  the inverters out of the operators. Each operator carries its own
  inverters, so the gate count is somewhat higher than a hand-optimised
  netlist.
* **Network lists.** The construction cites the networks but does not
  list their comparators; the lists here are standard ones with the same
  counts.
* **Delay, area and gate counts** are not modelled. The simulation is
  zero-delay and functional only.
* **Two-rail encoding.** Used for simulation only; see above.

## Files and simulation

```
rtl/mc_pkg.sv        tern_t / tpair_t types, Kleene helpers, network lists
rtl/kleene_gate.sv   one CMOS gate on {0,1,M}
rtl/xmux.sv          consensus-keeping multiplexer
rtl/diamond_m.sv     FSM transition operator <>_M
rtl/out_m.sv         output operator out_M
rtl/ppc.sv           recursive parallel prefix tree over <>_M
rtl/twosort.sv       MC 2-sort(B)
rtl/mc_sort_net.sv   MC sorting network (top)
tb/mc_tb_pkg.sv      reference model (Gray code, valid strings, closures)
tb/tb_*.sv           one self-checking bench per module, plus
                     tb_twosort_exhaustive (all valid pairs, B = 8 and 10),
                     tb_sort_workloads (network x width grid) and
                     tb_mc_sort_net_full (the top at its defaults)
```

Any bench runs with plain Verilator 5. The design is combinational and the
benches use `#1` delays, so `--timing` is needed:

```
verilator --binary --timing -Irtl -Itb rtl/mc_pkg.sv tb/mc_tb_pkg.sv \
    tb/tb_twosort.sv -y rtl -y tb --top-module tb_twosort
./obj_dir/Vtb_twosort
```

Every bench ends with `TB_RESULT checks=<n> failures=<m>` and stops itself
via a watchdog if it hangs. `tb_mc_sort_net` and `tb_sort_workloads` take the longest
to compile, two to three minutes, because each holds six to ten networks. `tb_mc_sort_net_full`
runs the top with no parameter overrides on 1000 random 10-value vectors.
