# Reversible adders from one 4x4 gate: the TSG gate, ripple carry and carry skip adders

A reversible circuit maps every input vector to a distinct output vector, so it erases
no information. Such circuits are built only from reversible gates, where the number of
outputs equals the number of inputs. Some outputs are needed only to keep the mapping
one-to-one. These *garbage outputs* are neither results nor inputs to another gate.
Reversible designs are compared by two counts: gates used and garbage outputs left.

This RTL implements the adders built around the TSG gate, as proposed in
H. Thapliyal and M. B. Srinivas, "A New Reversible TSG Gate and Its Application for
Designing Efficient Adder Circuits". TSG is a 4-input, 4-output reversible gate. The
central point is that one TSG gate, with one input tied to 0, is a complete full adder.
It leaves two garbage outputs. On that cell the library builds:

* an N-bit ripple carry adder using N gates and leaving 2N garbage outputs;
* a carry skip adder block using TSG gates plus Fredkin (controlled swap) gates, with
  2N gates and 3N garbage outputs;
* a 16-bit carry skip adder made of four 4-bit blocks, which is the top level (`tsg_cska`).

Everything is combinational logic written as ordinary synthesizable SystemVerilog.
There are no clocks, registers or memories. Reversibility here is structural: every gate
output, including each garbage output, is brought out to a port. Nothing is silently dropped.

## The TSG gate (`tsg_gate`)

Inputs A, B, C, D; outputs P, Q, R, S:

    P = A
    Q = A'C' xor B'
    R = Q xor D
    S = Q.D xor (A.B xor C)

The gate's truth table (A B C D -> P Q R S):

| ABCD | PQRS | ABCD | PQRS |
|------|------|------|------|
| 0000 | 0000 | 1000 | 1110 |
| 0001 | 0010 | 1001 | 1101 |
| 0010 | 0111 | 1010 | 1111 |
| 0011 | 0100 | 1011 | 1100 |
| 0100 | 0110 | 1100 | 1001 |
| 0101 | 0101 | 1101 | 1011 |
| 0110 | 0001 | 1110 | 1000 |
| 0111 | 0011 | 1111 | 1010 |

The equations and the table agree on every row, and all 16 outputs are distinct. Tying
some inputs to constants gives familiar functions on Q:

| setting      | Q          |
|--------------|------------|
| B=1, C=0     | NOT A      |
| C=0          | A xor B    |
| B=1          | NOR(A, C)  |
| B=0          | OR(A, C)   |

The NOR setting departs from the source. Its drawing shows B tied to **0** with Q labelled
A'C'. Under the gate's own equation and truth table, B=0 gives OR(A, C), and NOR needs
B=1. This RTL follows the equation and the truth table, which agree with each other. The
testbench checks both settings. Likewise, the NOT setting needs C=0, which the drawing
leaves unlabelled.

## A full adder in one gate (`tsg_full_adder`)

Drive the TSG gate with A=a, B=b, C=0, D=cin. Because C=0, Q = A' xor B' = a xor b, and:

    P = a                          garbage
    Q = a xor b                    garbage, or the bit's propagate signal
    R = a xor b xor cin            sum
    S = (a xor b).cin xor a.b      carry out

S is the usual carry: if a xor b = 1 the carry is cin, otherwise it is a.b. The module
brings Q out as `prop`. A plain ripple adder treats it as garbage. The carry skip block
uses it as the bit's propagate signal, so it needs no extra XOR gate.

## Ripple carry adder (`tsg_rca`)

N full-adder cells chained carry-out to carry-in. Costs: N gates, 2N garbage. The
garbage port is 2N bits wide: `garbage[2i+1]` is x[i] xor y[i] and `garbage[2i]` is x[i].
The source names these outputs but does not say which is which, so that ordering is
this design's choice. The default N is 4, the size drawn in the source; any N >= 1 works.

## Carry skip block (`cska_block`)

This is the least obvious part of the design. A carry skip adder splits the operands
into blocks. If every bit of a block propagates (x[i] xor y[i] = 1 for all i), a carry
entering the block will leave it unchanged. The block can therefore pass its carry in
straight to its carry out, without waiting for the carry to ripple through the block.
The conventional version uses an AND gate and an OR gate:
cout = c_W OR (P AND cin). The reversible block uses Fredkin gates instead.

A Fredkin gate has inputs A, B, C and outputs P = A, Q = A ? C : B, R = A ? B : C.
It is used here in two ways:

* **AND.** With C = 0, R = A AND B. Its P and Q outputs are garbage. A W-input AND of
  the bit propagates takes W-1 of these gates. For W = 4 they form the tree
  (p0.p1).(p2.p3). For other widths the module builds a balanced, heap-ordered tree:
  node k is the AND of nodes 2k and 2k+1, and the leaves sit at nodes W..2W-1.
* **Selector.** With A = P (the block propagate), B = c_W (the carry out of the
  block's last full adder) and C = cin, the Q output is `P ? cin : c_W`. This is the
  block's carry out. P and R are garbage.

The selector is not the same truth table as AND-OR. With P = 1 and cin = 0, AND-OR
gives c_W, while the selector gives cin. In a correct adder c_W equals cin whenever
P = 1, so the settled results agree. The difference is in timing: the selector never
waits for c_W when P = 1. That is the point of the skip. This model has no delays, so
only the logical behaviour is checked.

Block signals:

| port      | width | meaning |
|-----------|-------|---------|
| `x`, `y`  | W     | operands |
| `cin`     | 1     | block carry in |
| `sum`     | W     | sum bits |
| `cout`    | 1     | `P ? cin : c_W` |
| `garbage` | 3W    | `[W-1:0]`: x pass-through of each TSG; `[W+2k+1:W+2k]`: {Q, P} of AND node k+1; `[3W-2]`: block propagate P; `[3W-1]`: selector R |

Cost per block: W TSG + (W-1) AND + 1 selector = 2W gates. Garbage is
W + 2(W-1) + 2 = 3W.

## The 16-bit carry skip adder (`tsg_cska`, top)

`N/W` blocks in a chain: block j's `cout` is block j+1's `cin`. The defaults are
N = 16 and W = 4. The 4-bit block is the size drawn in the source. The 16-bit total
and the equal block sizes are this design's choices; the source gives only a general N.
N must be a multiple of W, and elaboration stops with an error otherwise. Costs for the
whole adder:

| circuit               | gates | garbage | built at default |
|-----------------------|-------|---------|------------------|
| full adder            | 1     | 2       | 1 gate, 2 garbage ports |
| N-bit ripple carry    | N     | 2N      | N=4: 4 gates, 8 garbage bits |
| N-bit carry skip      | 2N    | 3N      | N=16: 16 TSG + 16 Fredkin = 32 gates, 48 garbage bits |

The source counts an N-bit carry skip adder as N TSG gates, plus N-1 Fredkin gates for
an N-input AND, plus one selector. That is 2N in total. A chain of 4-bit blocks also
comes to 2N gates (2 per bit) and 3N garbage outputs.

## How far to trust it

* Each gate is checked exhaustively. The TSG gate is checked against its truth table,
  typed in as data rather than computed from the equations, and the test confirms that
  it is one-to-one. The Fredkin gate is checked against the controlled-swap definition.
* The full adder and the 4-bit ripple adder are checked exhaustively. A 16-bit ripple
  adder is checked with 20,000 random cases.
* Carry skip blocks of 4 and 3 bits are checked exhaustively. An 8-bit block gets
  20,000 random cases, a quarter of them fully propagating. The block propagate and
  selector garbage outputs are checked too.
* The 16-bit top level is run at its default parameters: 50,000 random additions,
  2,000 fully propagating additions, and cases where one block generates a carry while
  the blocks above it propagate. The test counts how often a block skips a 1 carry,
  passes a 0 carry, or sends out its own ripple carry. It also counts how often the
  carry in crosses all four blocks, and how often the adder overflows. The test fails
  if any of these never happens.
* Every testbench was also run against a deliberately broken copy of its module, and
  each one failed.

What is not modelled: any timing or delay (the source evaluates gate and garbage counts,
not speed), and the conventional AND-OR carry skip block, which serves only as the baseline.
The source mentions these adders as a basis for the ALU of a quantum CPU. That ALU is
not described, so it is not built.

## Files and simulation

`rtl/`:
`tsg_pkg.sv` (gate and garbage count functions), `tsg_gate.sv`, `fredkin_gate.sv`,
`tsg_full_adder.sv`, `tsg_rca.sv`, `cska_block.sv`, `tsg_cska.sv` (top).

`tb/`: one self-checking testbench per module, `tb_<module>.sv`. Each prints a
`TB_RESULT checks=N failures=M` line and finishes.

Run a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/tsg_pkg.sv tb/tb_tsg_cska.sv \
        --top-module tb_tsg_cska -Mdir obj_tsg_cska -o sim
    ./obj_tsg_cska/sim

Use the same command for any other testbench with its name substituted. Each one
finishes in well under a second. To change the adder size, set `N` and `W` on
`tsg_cska`, for example `tsg_cska #(.N(32), .W(8))`. To run `tb_tsg_cska` at another size, change the
defaults of `tsg_cska` together with the testbench's local parameters `N` and `W`.
