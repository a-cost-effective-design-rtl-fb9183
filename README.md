# A reversible programmable logic array for three inputs

A gate is *reversible* when its inputs can always be recovered from its
outputs. Every input vector then maps to its own output vector, so no
information is erased. Landauer's principle says that erasing a bit costs at
least kT ln 2 of energy. A circuit built only from reversible gates therefore
has no such lower bound on what it dissipates. That is why reversible logic
interests people working on low-power, optical and quantum hardware.

Reversible circuits follow two rules that ordinary logic does not:

* **No fan-out.** A wire may feed only one gate input. To use a signal twice,
  a gate must make a copy of it.
* **No feedback.** The circuit is a loop-free, combinational network.

This repository is a SystemVerilog model of a *reversible PLA*: a
programmable logic array built only from two reversible gates, the Feynman
gate and the MUX gate. Like a conventional PLA it has two parts:

* an **AND plane**, which forms product terms from the inputs;
* an **OR plane**, which sums selected product terms into each output.

The AND plane forms all eight minterms of the inputs A, B and C. Each output
can therefore realise any of the 256 Boolean functions of three variables.

The model is gate-level and structural. Each reversible gate is one small
module, and the planes are netlists of those modules, so the synthesised
structure matches the reversible netlist gate for gate. The model has no
clock. It checks the logic function and the structure, not any physical
property of reversible hardware.

## The two gates

| gate | ports | function | quantum cost |
|---|---|---|---|
| Feynman (`feynman_gate`) | A, B -> P, Q | P = A, Q = A xor B | 1 |
| MUX (`mux_gate`) | A, B, C -> P, Q, R | P = A, Q = A xor B xor C, R = A'C xor AB | 4 |

A gate with a constant on one input does a simpler job:

* **Feynman gate, B = 0:** Q is a copy of A. This is how a signal is fanned
  out.
* **Feynman gate, B = 1:** P = A and Q = A'. The gate gives a signal together
  with its complement.
* **MUX gate, C = 0:** R = A & B. The MUX gate works as an AND gate.
* **MUX gate, B = 1:** R = A'C xor A = A | C. The MUX gate works as an OR
  gate.

The MUX gate gets its name because R = A ? B : C. Both gates are bijections
on their inputs, which `tb_mux_gate` and `tb_feynman_gate` check
exhaustively.

The MUX gate is sometimes called *conservative*, meaning it keeps the number
of ones between input and output. With Q = A xor B xor C that is false: 011
maps to 001. The model implements the equations above. It does not claim the
gate is conservative.

## The AND plane (`rpla_and_plane`)

This block takes the most structure. The AND plane has 37 gates. It works in
three steps.

1. **Literal trees: 21 Feynman gates.** The plane needs each of A, A', B, B',
   C and C' four times. Each literal appears in four of the eight minterms.
   Fan-out is forbidden, so `rpla_literal_tree` builds the copies from one
   input X with three levels of Feynman gates, all with B = 1:

   ```
   level 0:   X  -> (X, X')
   level 1:   X  -> (X, X')         X' -> (X', X)
   level 2:   each of the four level-1 outputs -> (itself, its complement)
   ```

   The four level-2 gates give eight wires: four copies of X and four of X'.
   The AND plane uses each wire exactly once. No Feynman gate output is left
   unused. There are seven gates per input and 21 in all.

2. **Two-literal products: 8 MUX gates.** Each gate has C = 0 and computes
   one product: A'B', A'B, AB' or AB. Every product is built twice, once for
   each polarity of C.

3. **Three-literal products: 8 MUX gates.** Each gate has C = 0 and ANDs a
   two-literal product with C' or C. The results are the eight minterms.

Output `pterm[i]` is the minterm whose {A,B,C} equals i, with A as the most
significant bit. For example, A=1, B=0, C=0 gives `pterm = 8'b0001_0000`.
Exactly one bit of `pterm` is ever high.

The cost figures for this plane:

* **Gates:** 21 Feynman + 16 MUX = 37.
* **Quantum cost:** f + 4m = 21 + 64 = 85, where f and m are the numbers of
  Feynman and MUX gates.
* **Logic-operation count:** each MUX gate has 3 XOR, 2 AND and 1 NOT in its
  equations, and each Feynman gate has 1 XOR. The total is 69 XOR, 32 AND
  and 16 NOT.
* **Constant inputs:** each gate has one, so 37.

The published gate arrangement is followed. The exact wiring is not: which
copy of a literal goes to which AND gate is a regular assignment of this
design's own.

**Garbage outputs.** The P and Q outputs of the 16 MUX gates carry nothing
that is used later. A strictly reversible circuit has to keep them, so they
leave the block on a 32-bit `garbage` port. Gate g uses bits 2g+1:2g. Gates
0..7 are the A.B stage, in the order 2j+k, and gates 8..15 are the C stage.
Earlier descriptions of this structure count zero garbage outputs. That
count includes only the Feynman gates, whose outputs really are all used.

## The OR plane (`rpla_or_plane`)

The OR plane is a chain of MUX gates used as OR gates (B = 1):

* the first gate ORs terms 0 and 1;
* each later gate ORs the running sum, on its A input, with the next term,
  on its C input.

Its default is `N_TERMS = 3`: two gates compute A+B and then A+B+C. The
published OR plane has this form. The gate's P and Q outputs go to a
`garbage` port, (N_TERMS-1)*2 bits wide.

The published tally of this plane disagrees with its own diagram:

* it counts three gates, and 9 XOR + 6 AND + 3 NOT operations;
* the diagram draws two gates for the three-input OR.

This model follows the diagram. A chain of three gates would OR four terms.

## Programming the array (`rpla`, the top)

```
a,b,c --> AND plane --> 8 minterms --+--> Feynman copiers (N_OUT-1 per minterm)
                                     |
        for each output j:  minterm i  AND prog[j][i]   (8 MUX gates, C = 0)
                            OR of the 8 gated terms      (rpla_or_plane, N_TERMS = 8)
                            --> f[j]
```

The published work gives the AND plane, the OR-gate chain and the claim that
the array realises any three-input function. It does not say how the
product terms for an output are chosen. This top chooses them in the
simplest way that uses the same two gates:

* **Programming bits.** Each output j has an 8-bit word `prog[j]`. Minterm i
  reaches output j through a MUX-gate AND with bit `prog[j][i]`.
* **One OR plane per output.** An 8-term OR plane, a chain of 7 gates, sums
  the gated terms.
* **Copies for several outputs.** If `N_OUT > 1`, each minterm runs down a
  chain of Feynman copiers (B = 0), which produces one copy per output.
  Fan-out is forbidden, so a minterm cannot simply drive several wires.

Only one minterm is ever high, so `f[j] = prog[j][{a,b,c}]`. The programming
word is simply the output's truth table:

| function | prog word |
|---|---|
| A&B&C | `8'b1000_0000` |
| A\|B\|C | `8'b1111_1110` |
| A^B^C | `8'b1001_0110` |
| majority | `8'b1110_1000` |

**Parameters.** `N_OUT` is the number of outputs, the "m" of a PLA. It has no
published value and defaults to 1. The number of inputs (3) and of product
terms (8) are fixed by the AND plane.

**Ports.**

* `a`, `b`, `c`: the primary inputs.
* `prog`: an array of N_OUT words of type `rpla_pkg::pterm_t`.
* `f[N_OUT-1:0]`: the outputs.
* `garbage`: 32 + 30*N_OUT bits. The first 32 come from the AND plane. Each
  output j then adds a 30-bit slice: 16 bits from its programming ANDs
  followed by 14 from its OR plane.

**Timing.** The model has no clock, reset or programming protocol. `prog` is
a plain input that is assumed to be held steady while the array is used.

**Gate count of the top at N_OUT = 1:** 37 gates in the AND plane, 8 MUX
gates for programming and 7 MUX gates in the OR plane.

## Where this model departs from published descriptions

* **Product-term selection.** The selection mechanism (programming bits, one
  8-term OR plane per output, Feynman copier chains) is this design's own;
  see the section above.
* **Gate pin order.** Some drawn Feynman gates have the constant 1 on the
  upper pin. Every copy/complement gate is built as FG(signal, 1), which is
  the only order that gives a signal and its complement.
* **Literal wiring.** Which literal copy feeds which AND gate in the AND
  plane is a regular assignment. Every copy is used once.
* **OR plane size.** The OR plane uses N_TERMS-1 gates, as drawn, not the
  three gates of the published tally.
* **Where the OR appears.** One description places the MUX gate's OR result
  on Q. The equations put it on R, which is where this model takes it.
* **Constant inputs.** The OR plane has N_TERMS-1 constant inputs, one per
  gate. A published table gives 37 for the OR plane. That looks like a copy
  of the AND-plane figure.
* **Garbage outputs.** The MUX gates' unused outputs are brought out as
  garbage ports rather than counted as zero.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if it
hangs.

| testbench | what it checks |
|---|---|
| `tb_mux_gate` | all 8 input vectors against R = A ? B : C, Q as parity, P = A; bijectivity; the AND and OR configurations |
| `tb_feynman_gate` | all 4 input vectors; bijectivity; copier and inverter configurations |
| `tb_rpla_and_plane` | all 8 input vectors, each minterm against its literals, one-hot output, the stage-1 product seen on each stage-2 gate's P, and the point A=1 B=0 C=0 -> only O4 high |
| `tb_rpla_or_plane` | the 3-term plane on all 8 vectors (including A=B=C=1 -> 1) and an 8-term plane on all 256 |
| `tb_rpla` | top with N_OUT = 3: output 0 through all 256 truth tables and outputs 1-2 random, all input vectors, against a sum-of-products reference; counts reprogramming, a minterm shared by several outputs through the copiers, masking, and use of every minterm, and fails if any never occurs |
| `tb_rpla_full` | top at its default size: every one of the 256 functions on all 8 inputs, plus the two single-point cases above through the full array |

Each testbench was also run against a deliberately broken copy of its
module, and every one reported failures. The breaks were:

* dropping C from the MUX gate's Q;
* replacing the Feynman XOR with OR;
* swapping the C polarity in the AND plane;
* tying the OR gates' B input to 0;
* reversing the programming-bit order.

## Simulating and changing it

The design is plain combinational SystemVerilog. Read the package first:

```
verilator --binary --timing --assert -Wall -Wno-fatal \
    rtl/rpla_pkg.sv rtl/feynman_gate.sv rtl/mux_gate.sv rtl/rpla_literal_tree.sv \
    rtl/rpla_and_plane.sv rtl/rpla_or_plane.sv rtl/rpla.sv \
    tb/tb_rpla.sv --top-module tb_rpla
./obj_dir/Vtb_rpla
```

Replace `tb_rpla` with any other testbench name to run that test. Each test
runs in well under a second.

* **More outputs.** Set `N_OUT` on `rpla`. The `garbage` width follows
  automatically.
* **A wider OR plane.** Change `N_TERMS` on `rpla_or_plane`.
* **More inputs.** The AND plane is written for exactly three inputs, as
  published. A wider array needs a wider literal tree (2^(n-1) copies of each
  literal) and more AND stages.

Files:

* `rtl/rpla_pkg.sv`: sizes and the `pterm_t` type.
* `rtl/feynman_gate.sv`, `rtl/mux_gate.sv`: the two gates.
* `rtl/rpla_literal_tree.sv`: the copy/complement tree for one input.
* `rtl/rpla_and_plane.sv`: the AND plane.
* `rtl/rpla_or_plane.sv`: the OR plane.
* `rtl/rpla.sv`: the programmable top.
