# A reversible programmable logic array from Feynman and MUX gates

A programmable logic array (PLA) computes any sum-of-products function of its
inputs: an AND plane forms product terms and an OR plane adds up the terms that
are programmed for each output. This design builds a PLA in which every gate is
*reversible*. Each gate maps its input bits one-to-one onto the same number of
output bits, so the inputs can always be reconstructed from the outputs. The
motivation is Landauer's bound: a gate that throws information away must
dissipate at least kT ln 2 of energy per lost bit, and a logically reversible
gate loses none.

Reversible logic brings three rules that shape the whole circuit:

* **No fan-out.** A wire may drive exactly one gate input. A signal needed in
  several places is copied explicitly with a gate.
* **Constant inputs.** Gates are turned into AND, OR, copy or NOT by tying some
  of their inputs to 0 or 1.
* **Garbage outputs.** A gate that turns three bits into three bits but is used
  for a one-bit function leaves two outputs nobody needs. They cannot be
  dropped from the circuit's description, so they are brought out to a
  `garbage` port.

Only two primitives are used: the 2x2 Feynman gate and the 3x3 MUX gate. The
default array has three inputs and two outputs. Each output can be programmed
to any of the 2^8 = 256 Boolean functions of three variables. That is enough
for a full adder or a full subtractor.

All of the logic is combinational. There is no clock, no reset and no
handshake.

## The two primitives

| gate | inputs | outputs | quantum cost |
|------|--------|---------|--------------|
| Feynman (CNOT), `feynman_gate` | in1=A, in2=B | out1 = A, out2 = A xor B | 1 |
| MUX, `mux_gate` | in1=A, in2=B, in3=C | out1 = A, out2 = A xor B xor C, out3 = A'C xor AB | 4 |

Both are bijections. The MUX gate's `out3` is a 2:1 multiplexer: it gives B
when A = 1 and C when A = 0. The array uses the gates in four ways:

| use | how it is wired | useful output | garbage |
|-----|-----------------|---------------|---------|
| copier | Feynman, in2 = 0 | out1 = out2 = A | none |
| inverter | Feynman, in2 = 1 | out1 = A, out2 = A' | none |
| AND | MUX, in3 = 0 | out3 = A and B | out1, out2 |
| OR | MUX, in2 = 1 | out3 = A or C | out1, out2 |

The OR sits on `out3`. With in2 = 1, `out2` is A xnor C, not an OR. Some
descriptions of this gate put the OR on its second output and call the gate
*conservative*, meaning it keeps the number of ones. With the equations above,
neither holds: for example, input 001 gives 011. This RTL implements the
equations and takes the OR from `out3`. `tb_mux_gate` records both facts.

## AND plane: decoding every minterm (`rev_and_plane`)

The AND plane produces all K = 2^n minterms of its n inputs (K = 8 for n = 3).
It raises `minterm[i]` exactly when `x == i`. `x[n-1]` is the most significant
bit. With inputs named A, B, C, `x = {A, B, C}`, so A=1, B=0, C=0 raises
`minterm[4]` alone.

The difficult part is getting the literals to the gates without fan-out. Each
literal (x_j or x_j') appears in K/2 minterms, so K/2 separate copies of it are
needed. For each input bit the plane uses:

1. one Feynman inverter, which gives x_j and x_j';
2. two Feynman copy chains (`fy_fanout`), one per polarity. Each chain has
   K/2 - 1 gates. Gate g passes the signal along on `out1` and emits copy g on
   `out2`. The last gate's `out1` is the final copy.

Minterm i uses one specific copy of each of its literals. Its copy index is the
minterm number with bit j deleted. For example, minterm 5 (101) takes copy
`10b` = 2 of x_0, copy `11b` = 3 of x_1' and copy `01b` = 1 of x_2. This
numbering is a bijection between the minterms of one polarity and the copies,
so every copy is used exactly once.

Each minterm is then a chain of n-1 MUX-as-AND gates. The chain starts with the
most significant literal, and each later gate ANDs the running product with the
next literal.

An immediate assertion checks that the minterm vector is one-hot.

## OR plane: programmable switches and an OR chain

Each output has its own OR plane, built in two steps:

* **Switches** (in `rpla`). For each minterm there is one MUX gate with
  in1 = program bit, in2 = minterm, in3 = 0. Its `out3` passes the minterm when
  the program bit is 1 and gives 0 otherwise.
* **OR chain** (`rev_or_plane`). K-1 MUX gates with in2 = 1. The first gate ORs
  terms 0 and 1. Each later gate ORs the running result with the next term.
  The three-term version is exactly two gates: O = (A + B) + C.

When there are several outputs, every minterm is first copied once per output
with a Feynman copy chain of M_OUT-1 gates.

## Programming

`prog[o]` is simply the truth table of output o: bit i is the value f[o] should
take when `x == i`. Two examples with `x = {A, B, Cin}`:

* Full adder: `prog[0] = 8'h96` (sum) and `prog[1] = 8'hE8` (carry).
* Full subtractor A - B - Bin: `prog[0] = 8'h96` (difference) and
  `prog[1] = 8'h8E` (borrow).

`prog` is an ordinary input port. It is meant to be held static, like the fuses
of a conventional PLA, but it can be changed at any time. The outputs follow it
combinationally.

## Cost of the default array (n = 3, m = 2)

| item | count |
|------|-------|
| Feynman gates | 21 in the AND plane + 8 minterm copies = 29 |
| MUX gates | 16 AND + 16 switches + 14 OR = 46 |
| quantum cost | 29 x 1 + 46 x 4 = 213 |
| constant inputs | 75 (one per gate) |
| garbage outputs | 92 |
| inputs / outputs in total | 3 + 16 + 75 = 94 in, 2 + 92 = 94 out |

The equal totals of inputs and outputs are what logical reversibility
requires.

Using the 5-cost Fredkin gate in each of the 46 MUX positions would raise the
quantum cost to 259. That saving is the reason the MUX gate is used.

`rpla_pkg` holds these formulas as functions of n and m. The RTL uses them to
size the garbage ports.

## Garbage port layout

The `garbage` bits are ordered from bit 0 upwards:

1. **AND plane:** minterm 0 first. For each of its gates in chain order, `out1`
   then `out2`. That is 2(n-1) bits per minterm.
2. **Each output, starting with output 0:**
   * its K switch gates: `out1` (the program bit) then `out2`;
   * its OR chain: gate 0 first, `out1` then `out2`.

Some garbage bits are plain copies of an input: a switch gate's `out1`
repeats its program bit.

## How this RTL relates to the published design

**Taken from the published design:**

* the two planes and which gates each uses;
* the equations of both gates;
* three inputs and eight minterm product terms, numbered with A as the most
  significant bit;
* the OR-plane circuit: a chain of MUX gates with in2 tied high and the OR
  taken from `out3`.

**Chosen here, because the published material does not settle them:**

* The gate-level netlist of the AND plane. The published schematic cannot be
  read gate by gate, so this RTL uses the smallest arrangement of copy chains
  and AND chains.
* How the OR plane is programmed: one MUX-gate switch per crosspoint, driven
  from a program port. The text calls the array programmable but gives no
  mechanism.
* A fixed AND plane. The text also says the AND plane's buffers can be
  programmed, but nothing describes how.
* Two outputs by default, so that adders and subtractors fit.
* Bringing all garbage out on a port.

**Not built:** the Fredkin-gate array that the published design is compared
against.

## Parameters

| module | parameter | default | meaning |
|--------|-----------|---------|---------|
| `rpla` | `N_IN` | 3 | inputs; K = 2^N_IN product terms |
| `rpla` | `M_OUT` | 2 | outputs |
| `rev_and_plane` | `N_IN` | 3 | inputs (at least 2) |
| `rev_or_plane` | `N_TERMS` | 3 | terms ORed (at least 2) |
| `fy_fanout` | `COPIES` | 4 | copies produced |

The gate count of the AND plane grows as n * 2^n. The structure is meant for a
handful of inputs.

## Files

| file | contents |
|------|----------|
| `rtl/rpla_pkg.sv` | quantum costs and gate/garbage/constant count formulas |
| `rtl/feynman_gate.sv`, `rtl/mux_gate.sv` | the two primitives |
| `rtl/fy_fanout.sv` | Feynman copy chain |
| `rtl/rev_and_plane.sv` | minterm decoder |
| `rtl/rev_or_plane.sv` | MUX-gate OR chain |
| `rtl/rpla.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_rpla_arith` |

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_feynman_gate` | full truth table, copier and inverter use, bijectivity |
| `tb_mux_gate` | full truth table against `out3 = A ? B : C`, bijectivity, AND and OR uses, that `out2` is XNOR in the OR use, and which inputs keep their ones count |
| `tb_rev_and_plane` | all minterms for n = 3 and n = 4; every garbage bit; that the full output word differs for each input |
| `tb_rev_or_plane` | 3-term plane exhaustively, including garbage; 8-term plane over all 256 words |
| `tb_rpla` | at default parameters: all 256 programs on output 0 with random programs on output 1, all inputs, garbage width, quantum cost, and reversibility for each program. It also counts each mechanism (reprogramming, every minterm passed, a blocked minterm, outputs 1 and 0) and fails if any never occurred |
| `tb_rpla_arith` | the array used as a full adder and a full subtractor, checked against integer arithmetic |

To run one testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/rpla_pkg.sv tb/tb_rpla.sv --top-module tb_rpla
    ./obj_dir/Vtb_rpla

Each testbench finishes in well under a second.
