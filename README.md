# A reversible programmable logic array (RPLA) in SystemVerilog

A programmable logic array computes several Boolean functions of the same
inputs in two planes: an AND plane forms product terms, an OR plane sums
chosen product terms into each output. This design builds such an array
from **reversible gates only**. A reversible gate maps its input word
one-to-one onto its output word, so it loses no information. In principle
it can then avoid the kT·ln2 of heat that is spent for every bit a
conventional gate erases. Two gates are used:

| gate | inputs → outputs | role in the array |
|------|------------------|-------------------|
| Feynman (controlled NOT) | (x1, x2) → (x1, x1⊕x2) | copier with x2 = 0, complementer with x2 = 1 |
| Fredkin (controlled swap) | (x1, x2, x3) → (x1, x1'x2 + x1x3, x1x2 + x1'x3) | AND with x3 = 0 (third output), OR with x3 = 1 (second output) |

Reversible logic has two rules that shape the whole array:

* **No fan-out.** A wire may not be split. Every signal used in more than one
  place has to be copied by a gate, here a Feynman gate.
* **Garbage.** Gates have as many outputs as inputs. The outputs a function
  does not need are *garbage outputs*. They are carried out of the circuit,
  not dropped. Designs are compared by how many gates and garbage lines they
  need.

The array follows the RPLA of H. Thapliyal and H. R. Arabnia ("Reversible
Programmable Logic Array (RPLA) using Fredkin & Feynman Gates for Industrial
Electronics and Applications"). The default size is the one they draw:
3 inputs (A, B, C), 8 minterms, 3 outputs (F1, F2, F3), and 4 OR inputs
(I1..I4) per output. They demonstrate it by programming it as a 1-bit full
adder and as a 1-bit full subtractor. The RTL is parameterised in the number
of inputs, outputs and OR inputs.

## Signal flow

```
            rpla_and_array                                   rpla_or_array
        +-------------------------------+                 +-----------------------+
 x[2]=A | Feynman tree -> 8 literals ---|                 | F1: F(F(F(I1,I2,1),   |
 x[1]=B | Feynman tree -> 8 literals ---|-> 2 Fredkin --->|        I3,1),I4,1)    |--> f[0]
 x[0]=C | Feynman tree -> 8 literals ---|   AND gates per | F2: ...               |--> f[1]
        +-------------------------------+   minterm       | F3: ...               |--> f[2]
                       minterm[7:0] --> rpla_minterm_fanout (x8) --> mcopy[3][8]  +-----------------------+
                                            3 copies each                 ^ prog_en / prog_sel
```

The whole array is combinational. It has no clock, reset or state, and the
outputs settle a few gate delays after `x` or the program changes.

### Input fan-out trees (`rpla_input_fanout`)

Each input takes part in all 2^n minterms, once true and once complemented
for every minterm pair. So each input needs 2^n literal copies: 2^(n−1) true
and 2^(n−1) inverted. They come from a binary tree of Feynman complementers
(second input tied to 1) with n levels, which has 2^n − 1 gates. Each gate
puts its input on y1 and the complement on y2. Leaf `j` is therefore
inverted when `j` has an odd number of one bits. For n = 3 the leaves read
`x, x', x', x, x', x, x, x'` from leaf 0, the order drawn in the original
design. The tree uses every output of every gate, so it leaves no garbage.

### AND array (`rpla_and_array`)

Minterm `i` is the AND of one literal of each input: the true literal where
bit `b` of `i` is 1, the inverted one where it is 0. The AND is a chain of
n − 1 Fredkin gates, each with its third input tied to 0. Gate 0 takes the
A and B literals. Each later gate takes the running product and the next
literal. The product comes out on y3. `x[n-1]` (A) is the most significant
bit, so `minterm[i]` is 1 exactly when `x == i`: `minterm[0] = A'B'C'`,
`minterm[7] = ABC`.

Which leaf of a tree feeds which gate cannot be read from the original
drawing, and it does not change the function. The RTL hands out the leaves
of each polarity in ascending order (`rpla_pkg::copy_index`).

### Minterm copies (`rpla_minterm_fanout`)

Every output may use any minterm, so each minterm is copied once per output
by a chain of Feynman complementers:

* Gate 0 gives the minterm on y1 and passes the complement on.
* Each later gate takes that complement, gives the minterm back on y2 and
  passes the complement on through y1.

For three outputs this is the three-gate group drawn after each minterm in
the original. Its outputs are m, m, m plus one spare m', and the spare is
garbage. Copy `k` goes to output `k`.

### OR array and programming (`rpla_or_array`)

Each output is a chain of `OR_TERMS − 1` Fredkin gates, each with its third
input tied to 1. The chain computes `I1 + I2 + ... + I(OR_TERMS)`, taking
the sum from each gate's middle output.

In the original design the "program" is which minterm is wired to which
OR input. Here it is two input ports:

* `prog_en[j][s]`: OR input `s` of output `j` is connected.
* `prog_sel[j][s]`: which minterm (0..2^n − 1) it is connected to.

An unconnected input reads 0, so an output with no connected inputs is a
constant 0, as F3 is in both demonstrations. The program is not stored. It
is a plain input that should be held steady while the outputs are in use.

Output `j` only sees copy `j` of each minterm. Selecting the same minterm on
two inputs of one output would split that copy. An assertion in
`rpla_or_array` flags this, and such a program is illegal. Two different
outputs may use the same minterm, because each has its own copy.

An output can therefore be any sum of **at most `OR_TERMS` distinct
minterms**:

* With the default of 4, every function with up to 4 true rows of its truth
  table fits. This covers the full adder and the full subtractor.
* With `OR_TERMS = 8` (= 2^3) every one of the 256 functions of three inputs
  fits.

## Programs for the two demonstration circuits

| circuit | F1 (`f[0]`) | F2 (`f[1]`) | F3 (`f[2]`) |
|---------|-------------|-------------|-------------|
| full adder | SUM = m1+m2+m4+m7 | CARRY = m3+m5+m6+m7 | open (0) |
| full subtractor, A − B − C | DIFFERENCE = m1+m2+m4+m7 | BORROW = m1+m2+m3+m7 | open (0) |

For example, the full adder is `prog_en = {4'b0000, 4'b1111, 4'b1111}` with
`prog_sel[0] = {7,4,2,1}` and `prog_sel[1] = {7,6,5,3}` (slot 3 first). Here
C is the carry or borrow in.

## Gate and garbage budget

These counts come from the structure. They were checked by counting the
gates in the original drawing and are computed by functions in `rpla_pkg`.

| item | formula | default (n = 3, m = 3, t = 4) |
|------|---------|--------------------------------|
| Feynman gates, input trees | n·(2^n − 1) | 21 |
| Feynman gates, minterm copies | 2^n·m | 24 |
| Fredkin gates, AND array | 2^n·(n − 1) | 16 |
| Fredkin gates, OR array | m·(t − 1) | 9 |
| garbage lines | 2·(Fredkin gates) + 2^n | 58 |

All garbage lines are brought out on the `garbage` port of `rpla`, ordered
`{OR-array garbage, minterm complements, AND-array garbage}`. Some of them
are plain copies of an input. For example, gate 0 of every minterm with
A = 1 passes the A literal on y1. A synthesis tool will show these as
outputs wired straight to an input. That is how a reversible circuit
behaves, not a wiring fault.

## Where this RTL goes beyond or departs from the original

* **Four OR inputs, not eight.** The original text claims the three-input
  array realises any of the 2^8 functions. Its drawing, however, gives each
  output only four OR inputs, which limits an output to four minterms. The
  default follows the drawing. Set `OR_TERMS = 8` for the full claim.
* **Program ports.** The original wires minterms to OR inputs by hand for
  each application and gives no programming mechanism. The enable/select
  ports are this design's own model of that wiring. In silicon the selection
  would be fuses or configuration cells, not the multiplexers synthesis
  infers from this RTL. Those multiplexers are not reversible logic.
* **Other sizes.** The original draws only n = 3 and m = 3. The trees for n
  inputs, the (n − 1)-gate AND chains and the m-gate copy chains are the
  natural generalisation, not part of the original.
* **Bit orders and garbage numbering** (`x[2] = A`, `f[0] = F1`, slot 0 = I1,
  the order of the garbage bus) are this design's own.
* **Garbage is observable.** The original leaves garbage outputs dangling.
  Here they are ports, so no gate output is left unconnected.

## Files

| file | contents |
|------|----------|
| `rtl/rpla_pkg.sv` | default sizes, leaf-polarity and routing functions, gate and garbage counts |
| `rtl/feynman_gate.sv`, `rtl/fredkin_gate.sv` | the two reversible gates |
| `rtl/rpla_input_fanout.sv` | Feynman tree giving 2^n literals of one input |
| `rtl/rpla_and_array.sv` | trees plus Fredkin AND chains, all 2^n minterms |
| `rtl/rpla_minterm_fanout.sv` | Feynman chain copying one minterm per output |
| `rtl/rpla_or_array.sv` | programmed Fredkin OR chains |
| `rtl/rpla.sv` | the top: `x`, `prog_en`, `prog_sel` in; `f`, `garbage` out |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_rpla_any_function.sv` | all 256 functions of three inputs with `OR_TERMS = 8` |

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself through
a watchdog if it hangs. The checks:

* **Gates.** Both gates are checked exhaustively: truth table, the AND/OR or
  copy/complement use, bijectivity, and that a second gate restores the
  inputs. The Fredkin gate is also checked to be conservative, i.e. it keeps
  the number of ones.
* **Fan-out trees.** Checked for 1, 3 and 4 levels, including the literal
  leaf order of the 3-level tree.
* **AND array.** Checked exhaustively for 2, 3 and 4 inputs: the minterms
  must be one-hot.
* **Minterm copy chain.** Checked for 1, 3 and 5 copies.
* **OR array.** Checked against 2000 random legal programs at 4 and 8 inputs
  per output.
* **`tb_rpla` (default size, end to end).** Runs the full adder and the full
  subtractor over all input rows, then 500 random programs. It also checks
  the minterm complements on the garbage bus and the gate counts. For every
  program it also checks that the eight input words give eight different
  output words `{f, garbage}`, as a reversible circuit must. It counts
  and requires at least one each of: an open output, an output made true
  through a multi-input OR chain, a minterm shared by two outputs, and a
  change of program.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/rpla_pkg.sv tb/tb_rpla.sv --top-module tb_rpla
./obj_dir/Vtb_rpla
```

Every run finishes in well under a second.

The original gives no timing, area or power figures, so none are checked.
Gate delays are not modelled. The design is zero-delay combinational logic.
