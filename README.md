# Reversible adder/subtractor and parity-preserving subtractors

Reversible logic computes with gates whose outputs determine their inputs
uniquely: every gate is a bijection, so no information is erased and, in
principle, no energy has to be dissipated for erasing it. The price is
bookkeeping. A reversible circuit has as many output lines as input lines,
signals may not fan out (a copy has to be made by a gate), inputs that are only
there to make the map square are held at a constant (*constant inputs*), and
outputs that nobody needs are still produced (*garbage outputs*). Circuits are
compared by their *quantum cost* (the number of 1x1/2x2 primitive operations
needed to realise the gates), their constant inputs and garbage outputs, and a
rough logic count (XORs, ANDs and NOTs in the output expressions).

This RTL implements four one-bit arithmetic circuits built from the Feynman,
Double Feynman, MUX and TR gates:

| circuit | module | gates | quantum cost | constant inputs | garbage |
|---|---|---|---|---|---|
| half adder/subtractor | `rev_half_addsub` | 2 Feynman, 2 MUX | 2*1 + 2*4 = 10 | 2 | 3 |
| full adder/subtractor | `rev_full_addsub` | 5 Feynman, 2 MUX, 1 TR | 5 + 8 + TR | 3 | 5 |
| parity-preserving half subtractor | `pp_half_sub` | 1 Double Feynman, 1 MUX | 2 + 4 = 6 | 2 | 2 |
| parity-preserving full subtractor | `pp_full_sub` | 3 Double Feynman, 1 MUX | 6 + 4 = 10 | 4 | 5 |

The central idea is to use the MUX gate, a controlled swap with quantum cost 4,
where earlier designs used the Fredkin gate (cost 5). A MUX gate steered by a
data bit can produce two mutually exclusive product terms at once (for
example the carry `AB` and the borrow `A'B`), and a second MUX gate steered by
the add/subtract control then picks one of them. That is how the adders and
subtractors share one structure.

Everything is combinational: no clock, no reset, no state. Each circuit is a
gate-level netlist of instantiated gate modules, so the structure in the RTL
is the reversible circuit itself, line by line.

## The gates

| gate | module | P | Q | R | cost |
|---|---|---|---|---|---|
| Feynman (2x2) | `feynman_gate` | A | A ^ B | – | 1 |
| Double Feynman, F2G | `double_feynman_gate` | A | A ^ B | A ^ C | 2 |
| MUX gate, MG | `mux_gate` | A | A ? C : B | A ? B : C | 4 |
| TR gate | `tr_gate` | A | A ^ B | AB' ^ C | not given |

A Feynman gate with `B = 0` copies A onto two lines. This is the legal way to
fan a signal out, and every circuit here uses it. The F2G with `B = C = 0`
makes three copies. F2G and the MUX gate *preserve parity*:
`P ^ Q ^ R == A ^ B ^ C`. A circuit built only from such gates therefore has
equal input and output parity, so any single flipped line shows up as a parity
mismatch without a separate parity line. This is what makes the two subtractors
"parity preserving".

The TR gate is taken from the wider reversible-logic literature and is only
named, not defined, in the source of this design. Its equations here are the
usual ones. They agree with the logic count quoted for it (2 XOR, 1 AND,
1 NOT). With `C = 0` it acts as a half subtractor.

### Two readings of the MUX gate

This is the main point where the source is inconsistent, and it decides
whether the circuits work at all. The gate's printed definition gives the
middle output as `Q = A ^ B ^ C`. However, every circuit schematic needs the
classic form `Q = A'B ^ AC`, in which the gate swaps B and C when A = 1:

* the parity-preserving half subtractor labels that output `AB` for inputs
  `(A^B, B, 0)`, which only the swap form gives;
* the parity-preserving full subtractor labels it
  `(A^B)'C ^ (A^B)B`, the swap form again;
* the half adder/subtractor was checked over every pin assignment of its
  drawn wiring. It produces carry and borrow with the swap form and with no
  assignment under the XOR3 form;
* only the swap form preserves parity.

`mux_gate` therefore has a typed parameter `Q_FORM` (enum `mg_q_form_e` in
`rev_pkg`). Its default, `MG_Q_SWAP`, is used by all four circuits.
`MG_Q_XOR3` gives the printed definition and is kept for reference. It is
reversible but not parity preserving. Note that the logic count quoted for
the MUX gate (3 XOR, 2 AND, 1 NOT) belongs to the XOR3 form. The cost figures
below keep the published numbers.

## Half adder/subtractor (`rev_half_addsub`)

```
 FG_B (B, 0)          -> B, B                    fan-out of B
 FG_A (A, B)          -> A, A^B       = sd
 MUX1 (A, 0, B)       -> A = G1,  AB,  A'B       A steers: both product terms at once
 MUX2 (ctrl, A'B, AB) -> ctrl = G2, cb, other term = G3
```

`sd = A ^ B`. MUX2's middle output is `ctrl ? AB : A'B`. With `ctrl = 1` this is
the carry of A + B. With `ctrl = 0` it is the borrow of A - B. These are the
connections and output positions of the published schematic (G1 on the first
MUX gate, C/B in the middle of the second). Only two details are this design's
own:
the order in which MUX1's two product outputs enter MUX2 (the crossing is not
legible), and, following from it, the ctrl polarity. `ctrl = 1` means *add* in
both adder/subtractors.

## Full adder/subtractor (`rev_full_addsub`)

This is the hardest part to follow. Both outputs split into a *generate* term
that depends only on A and B, and a *propagate* term that involves the incoming
carry or borrow. With `p = A ^ B`:

| | generate | propagate |
|---|---|---|
| carry of A + B + cin | `AB` | `p & cin` |
| borrow of A - B - cin | `A'B` | `~p & cin` |

The two terms never overlap, so `cb = generate ^ propagate`. The generate
term is built exactly as in the half adder/subtractor: MUX1, steered by A,
makes `AB` and `A'B`, and MUX2, steered by ctrl, passes one of them on. The
propagate term is `cin & ~(p ^ ctrl)`. With `ctrl = 1` this is `cin & p`, and
with `ctrl = 0` it is `cin & ~p`. That is the TR gate's `R = AB' ^ C` with
inputs `(cin, p^ctrl, generate)`, so the TR gate forms the propagate term and
adds the generate term in one step.

```
 FG2  (B, 0)              -> B, B                     copies of B
 FG3  (cin, 0)            -> cin, cin                 copies of cin
 FG1  (A, B)              -> A, p = A^B
 FG4  (p, cin)            -> p, p^cin = sd
 MUX1 (A, 0, B)           -> A = g1, AB, A'B          A steers
 MUX2 (ctrl, A'B, AB)     -> ctrl, gen, other = g2    gen = ctrl ? AB : A'B
 FG5  (p, ctrl)           -> p = g3, p^ctrl
 TR   (cin, p^ctrl, gen)  -> cin = g4, cin^p^ctrl = g5, cb = cin&~(p^ctrl) ^ gen
```

Seven lines (A, B, cin, ctrl and three 0s) go in and seven come out. The
netlist follows the published schematic in these respects:

* the gate list: 5 Feynman, 2 MUX and 1 TR gate;
* the three constant inputs and the five garbage outputs g1..g5;
* every gate-to-gate connection that can be read from the schematic: FG1 fed
  by A and FG2; FG4 fed by FG1 and FG3 and giving the sum; MUX1 fed by FG1,
  FG2 and a 0; ctrl entering MUX2 beside two MUX1 outputs; FG5 after FG4; the
  TR gate fed by FG3, FG5 and MUX2 and giving C/B.

The schematic does not show which pin of a gate each line enters. Among all
pin assignments with these connections, the one above is the one that
computes the right results. The published text mentions `A ^ B` as a MUX
input, but in this netlist `A ^ B` goes to FG5 and the TR gate. Here MUX1 is
fed A and B, as in the half circuit. The netlist forces `ctrl = 1` to mean
add. It is correct for all 16 data inputs and reversible over all 128 line
values.

## Parity-preserving subtractors (`pp_half_sub`, `pp_full_sub`)

Half subtractor, exactly as published:

```
 F2G (B, A, 0)       -> B, A^B, B = g[1]
 MUX (A^B, B, 0)     -> A^B = diff, AB = g[0], (A^B)B = A'B = borrow
```

Full subtractor: the MUX gate steered by `A ^ B` passes B when A and B differ
(then the borrow is simply B) and the borrow-in C when they are equal.

```
 F2G1 (B, A, 0)      -> B, A^B, B = g[0]
 F2G2 (C, 0, 0)      -> C, C, C = g[1]
 MUX  (A^B, C, B)    -> A^B, borrow, (A^B)'B ^ (A^B)C = g[2]
 F2G3 (A^B, C, 0)    -> A^B = g[3], A^B^C = diff, A^B = g[4]
```

The MUX gate's data-input order is taken from the published output labels
(borrow on the middle output). The published text gives this circuit one
constant input and four garbage outputs. Its schematic, however, draws four
constant inputs and leaves five outputs unused, and this gate list cannot do
better with these connections. The RTL follows the schematic: `zero[3:0]` and
`g[4:0]`.

## Top level (`rev_addsub_top`)

The four circuits are independent. The top places them side by side, ties
every constant-input line to 0 and brings out the data inputs, the results and
the garbage outputs, with prefixes `ha_` (half adder/subtractor), `fa_` (full
adder/subtractor), `hs_` and `fs_` (parity-preserving half and full
subtractor). The garbage outputs stay visible. In a real reversible
implementation they are physical lines. Several of them are plain copies of an
input (every gate's `P = A`), so synthesis reports them as wired straight
through. That is expected.

Each circuit module keeps its constant inputs as a `zero` port instead of
tying them inside. Tie them to 0 for arithmetic use. Driving them with other
values exercises the full reversible map, which is how the testbenches prove
that every circuit is a bijection.

## Costs

The costs below are the published figures. The gate counts are those of this
RTL.

| circuit | quantum cost (published) | logic count (published) |
|---|---|---|
| half adder/subtractor | 2m + 2F = 10 | 8 XOR + 6 AND + 2 NOT |
| full adder/subtractor | 2m + 5F + 1TR | 13 XOR + 5 AND + 3 NOT |
| pp half subtractor | 1m + 1D = 6 | 5 XOR + 2 AND + 1 NOT |
| pp full subtractor | 1m + 3D = 10 | 9 XOR + 2 AND + 1 NOT |

(m = 4 for a MUX gate, F = 1 for a Feynman gate, D = 2 for a Double Feynman
gate.) The published per-gate counts give 8 XOR + 4 AND + 2 NOT for the half
adder/subtractor, not 6 AND. `rev_pkg` holds the per-gate quantum costs and
the circuit totals, and `tb_rev_addsub_top` checks the totals against them.

## Departures and choices, in one place

* MUX gate: the swap form `Q = A'B ^ AC` is used throughout, not the printed
  `Q = A ^ B ^ C` (see above). The other form can be selected with `Q_FORM`.
* TR gate: standard equations, since the source does not define the gate.
* Full adder/subtractor: the gate connections come from the schematic, but
  the pin order within each gate is this design's (the schematic does not
  show it).
* Half adder/subtractor: the MUX2 data-input order is a guess (the schematic's
  crossing is not legible).
* Add/subtract control: `ctrl = 1` adds and `ctrl = 0` subtracts, in both
  circuits.
* Parity-preserving full subtractor: 4 constant inputs and 5 garbage outputs,
  as drawn, not the 1 and 4 stated in the text.
* The Fredkin gate is not implemented. It appears only in the earlier designs
  that this one is compared against.

## Simulating

The testbenches are self-checking and exhaustive. Each one prints
`TB_RESULT checks=N failures=M` and stops with `$finish`. With Verilator 5:

```
verilator --binary --timing -Irtl -y rtl -y tb rtl/rev_pkg.sv \
    tb/tb_rev_addsub_top.sv --top-module tb_rev_addsub_top
./obj_dir/Vtb_rev_addsub_top
```

Replace `tb_rev_addsub_top` with any other testbench in `tb/`:

* `tb_feynman_gate`, `tb_double_feynman_gate`, `tb_mux_gate`, `tb_tr_gate`
  check each gate's equations, check that it is a bijection and, where it
  applies, check parity.
* `tb_rev_half_addsub` and `tb_rev_full_addsub` compare every input
  combination with integer addition and subtraction. They also drive all
  32 / 128 values of the lines, constants included, and require distinct
  outputs (reversibility).
* `tb_pp_half_sub` and `tb_pp_full_sub` do the same, and also check the
  garbage outputs against the schematic's labels and check parity
  preservation. The half subtractor's testbench also checks that any
  single-bit output fault breaks parity.
* `tb_rev_addsub_top` applies all 4096 combinations of the top's twelve data
  inputs. It checks every result and counts carries, borrows, add/subtract
  switches and borrow-in cases. It fails if any of them never happened.

Each run takes well under a second.

## Files

* `rtl/rev_pkg.sv`: MUX-gate form enum, per-gate quantum costs, circuit
  totals, garbage and constant counts.
* `rtl/feynman_gate.sv`, `rtl/double_feynman_gate.sv`, `rtl/mux_gate.sv`,
  `rtl/tr_gate.sv`: the gate library.
* `rtl/rev_half_addsub.sv`, `rtl/rev_full_addsub.sv`, `rtl/pp_half_sub.sv`,
  `rtl/pp_full_sub.sv`: the four circuits.
* `rtl/rev_addsub_top.sv`: the top level.
* `tb/tb_*.sv`: one testbench per module.
