# A fault tolerant ALU built from parity preserving reversible gates

This is an N-bit arithmetic logic unit in which every logic element is a
**reversible gate**. A reversible gate has as many outputs as inputs, and its
outputs determine its inputs uniquely. The gates used are also **parity
preserving**: the XOR of a gate's outputs always equals the XOR of its
inputs. Build a circuit only from such gates and the same holds for the whole
circuit, counting every line: operands, constant inputs, results and
"garbage" outputs. A single fault that flips one line breaks that equality, so
comparing input parity with output parity detects it. That is the sense in
which the ALU is "fault tolerant". (The detection itself is not part of the
design; see *Parity and fault detection* below.)

The ALU offers seven distinct arithmetic operations and four logic
operations. There are two ways to build it, both given here:

* **Design 1** puts an arithmetic circuit (a ripple carry adder with a
  programmable B input) and a logic circuit side by side. A Fredkin gate per
  bit picks one of the two results.
* **Design 2** has no separate logic circuit. A small *function selector* in
  front of each full adder reshapes the adder's three inputs so that the
  adder itself produces either the arithmetic or the logic result. This is
  the default.

Everything is combinational: there is no clock, register or reset. A result
is valid once the carry has rippled through all N cells.

## Operations

The select input is `s = {S2,S1,S0}`, plus `cin`. `N` defaults to 4.
Arithmetic is modulo 2^N.

| S2 | S1 | S0 | cin | f            | operation                  |
|----|----|----|-----|--------------|----------------------------|
| 0  | 0  | 0  | 0   | A            | transfer                   |
| 0  | 0  | 0  | 1   | A + 1        | increment                  |
| 0  | 0  | 1  | 0   | A + B        | add                        |
| 0  | 0  | 1  | 1   | A + B + 1    | add with carry             |
| 0  | 1  | 0  | 0   | A − B − 1    | subtract with borrow       |
| 0  | 1  | 0  | 1   | A − B        | subtract                   |
| 0  | 1  | 1  | 0   | A − 1        | decrement                  |
| 0  | 1  | 1  | 1   | A            | transfer                   |
| 1  | 0  | 0  | x   | A OR B       |                            |
| 1  | 0  | 1  | x   | A XOR B      |                            |
| 1  | 1  | 0  | x   | A AND B      |                            |
| 1  | 1  | 1  | x   | NOT A        |                            |

In arithmetic mode `cout` is the carry out of the adder. For subtraction it
is 1 when no borrow occurred. In logic mode `cout` has no defined meaning:
design 1 gives the arithmetic circuit's carry, design 2 gives X·Y of the top
slice.

All arithmetic rows come from one adder, `F = A + Y + cin`, with the B side
replaced by

    Y_i = S0·B_i + S1·B_i'      (S1 S0 = 00 → 0, 01 → B, 10 → B', 11 → all ones)

Each such Y_i is one Fredkin gate, FRG(B_i, S1, S0), read on its middle
output.

## The gates

Six reversible gates make up the whole design. Each is a module of its own,
`rtl/gate_*.sv`, so the gate-level netlist of every block can be read
directly. Every gate except the PPPG carries an immediate assertion that its
output parity equals its input parity.

| gate | lines | outputs |
|------|-------|---------|
| F2G (double Feynman) | 3 | P = A, Q = A⊕B, R = A⊕C |
| FRG (Fredkin)        | 3 | P = A, Q = A'B + AC, R = A'C + AB |
| NFT                  | 3 | P = A⊕B, Q = B'C ⊕ AC', R = BC ⊕ AC' |
| IG (Islam gate)      | 4 | P = A, Q = A⊕B, R = AB⊕C, S = BD ⊕ B'(A⊕D) |
| F2PG                 | 5 | P = AC⊕BC', Q = A⊕B, R = A⊕B⊕C, S = (A⊕B)C ⊕ (AB⊕D), T = AB'⊕E |
| PPPG                 | 5 | P = A, Q = A'C'⊕B', R = Q⊕D, S = QD ⊕ (AB⊕C), T = BE(A+D) + A'D(C⊕E) + B'D(A+E) |

Three of these equations need a comment. They are also the main places where
this RTL had to choose between conflicting statements of the gates:

* **NFT.** Q is often written BC' ⊕ AC'. That form is neither reversible nor
  parity preserving. It also fails the function selector, which needs the
  middle output to give S2·S0' and S2'·C_i when A = 0. Q = B'C ⊕ AC' does
  both, so the RTL uses it.
* **IG.** S is sometimes written BD ⊕ B'(A+D), which is not parity
  preserving. The RTL uses A⊕D. S is a garbage output wherever the ALU uses
  an IG, so this changes no result.
* **PPPG.** The equations are kept as published. Checked over all 32 inputs,
  they are neither a bijection nor parity preserving, so `gate_pppg` has no
  parity assertion. The ALU uses the PPPG with only two input patterns, and
  gives the correct outputs for both:
  * (A, B, 0, Cin, 0) gives the sum on R and the carry on S.
  * (A, 1, 1, D, 1) gives NOT A on S and A + D on T.

## Full adder cells

Every adder cell in the ALU is an `ft_full_adder`. Its parameter `FA`
(type `rl_pkg::fa_kind_e`) chooses among five interchangeable structures:

| `FA` | structure | gates |
|------|-----------|-------|
| `FA_GEN_TOF_FRG` | two parity preserving Toffoli structures (FRG+F2G each) and two F2G | 6 |
| `FA_GEN_TOF_F2G` | the same with the F2G+FRG+F2G Toffoli structure | 8 |
| `FA_IG`          | IG(A,B,0,0) then IG(A⊕B, Cin, AB, A) | 2 |
| `FA_PPPG`        | PPPG(A,B,0,Cin,0) | 1 |
| `FA_F2PG`        | F2PG(A,B,Cin,0,0), **default** | 1 |

The generalized adder (`fa_generalized`) works like this:

1. Toffoli(A, B, 0) forms AB.
2. F2G(B, 0, A) forms A⊕B.
3. Toffoli(A⊕B, Cin, AB) forms Cout = (A⊕B)·Cin ⊕ AB.
4. F2G(Cin, 0, A⊕B) forms the sum.

`pp_toffoli_frg` and `pp_toffoli_f2g` are the two ways to build a parity
preserving Toffoli function (R = AB⊕C).

F2PG is the default because it ties with PPPG as the cheapest cell, and of
the two only F2PG's published equations preserve parity.

## Design 1: arithmetic circuit + logic circuit + multiplexer

`alu_design1` has three parts:

* **`arith_circuit`**: N `y_select` Fredkin gates feed the B side of a
  `ripple_carry_adder`, whose A side takes A directly.
* **`logic_circuit`**: N copies of `logic_slice`. Each slice forms all four
  logic functions at once and picks one with a Fredkin 4:1 multiplexer
  (`frg_mux4`: two Fredkin gates choose by S0, a third by S1). Multiplexer
  inputs 0–3 are OR, XOR, AND, NOT. The functions come from:
  * F2G(B,0,0) makes three copies of B.
  * PPPG(A,1,1,B,1) gives NOT A and A OR B.
  * F2G(A,1,B) gives A⊕B.
  * FRG(A,0,B) gives AB.
* **A Fredkin gate per bit**, FRG(S2, arith_i, logic_i). On its middle
  output it passes the arithmetic bit when S2 = 0 and the logic bit when
  S2 = 1.

One slice uses 10 to 17 gates, depending on the adder.

## Design 2: one full adder does everything

Design 2 uses the fact that a full adder's sum, X⊕Y⊕Z, gives OR, XOR, AND or
NOT once its inputs are shaped suitably and its carry input is held at 0.
Each slice (`alu2_slice`) is a `function_selector` followed by one
`ft_full_adder`:

    X_i = A_i + S2·S0'·(S1 ⊕ B_i)
    Y_i = S0·B_i + S1·B_i'
    Z_i = S2'·C_i
    F_i = X_i ⊕ Y_i ⊕ Z_i,   C_(i+1) = majority(X_i, Y_i, Z_i)

With S2 = 0 this is the arithmetic circuit again: X = A, Y as above, and Z
is the incoming carry. With S2 = 1, Z = 0 cuts the carry chain and F = X⊕Y:

| S1 S0 | X      | Y  | X ⊕ Y     |
|-------|--------|----|-----------|
| 00    | A + B  | 0  | A OR B    |
| 01    | A      | B  | A XOR B   |
| 10    | A + B' | B' | A AND B   |
| 11    | A      | 1  | NOT A     |

The AND row works because (A + B') ⊕ B' is 0 when B = 0 and A when B = 1.
Note that X is *not* simply A in logic mode. The extra OR term in X is what
makes the OR and AND rows work.

The function selector uses seven gates:

| gate | output used |
|------|-------------|
| F2G(B,0,0) | copies of B |
| F2G(S1,B,0) | S1⊕B |
| NFT(0,S0,S2) | S2·S0' |
| NFT(0, S1⊕B, S2·S0') | S2·S0'·(S1⊕B) on R |
| PPPG(A,1,1, that, 1) | X on T |
| FRG(B,S1,S0) | Y |
| NFT(0,S2,C) | Z |

`alu_design2` chains N slices through their carries, and `ft_alu` is the
top.

## Parity and fault detection

Each gate module that is parity preserving checks that property with an
immediate assertion whenever it evaluates, and its testbench checks the
property and reversibility over every input vector.

The ALU has no parity checker, and no output that brings all garbage lines
out for one. Adding one means XOR-ing every input and constant line of a
slice and comparing the result with the XOR of every output line, garbage
included. Such a check is only meaningful with a parity preserving PPPG, for
the reason given under *The gates*.

## Departures and open points

* **Signal fan-out.** Select lines S0–S2 drive many gates, and in design 2
  they drive every slice. The same holds in design 1 for A and B, which feed
  both circuits. Strict reversible logic would copy such a line with F2G
  gates. The RTL wires these lines directly, as the block diagrams are drawn,
  and leaves out those copy gates.
* **Passed-on select lines.** The function selector's gates output S1, S0
  and S2 again on some lines. Here those lines are garbage.
* **Design 1 select line.** The text names the design 1 arithmetic/logic
  select line "S3", while the block diagram and the function table call it
  S2. The RTL uses S2, so both designs take the same select code.
* **Gate counts.** Design 1 slices match the published costs exactly: 17,
  15, 11, 10 and 10 gates for the five adders. Design 2 slices have 15, 13,
  9, 8 and 8 gates (7 in the function selector plus the adder). The published
  figures are one higher in every row, which the published circuit diagrams
  do not account for.
* **Width.** N = 4 is the published width. Any N ≥ 1 works; 1, 4 and 8 are
  simulated.
* **Not included.** The plain Feynman, Peres and Toffoli gates appear only as
  background. The ALU does not use them, so they are not included.

## Files

`rtl/` holds one module (or package) per file:

    rl_pkg                  fa_kind_e, toffoli_kind_e
    gate_f2g gate_frg gate_nft gate_ig gate_f2pg gate_pppg
    pp_toffoli_frg pp_toffoli_f2g
    fa_generalized fa_ig fa_pppg fa_f2pg → ft_full_adder
    ripple_carry_adder, y_select → arith_circuit
    frg_mux4 → logic_slice → logic_circuit
    alu_design1
    function_selector → alu2_slice → alu_design2
    ft_alu                  top: N (4), DESIGN (2), FA (FA_F2PG)

The top's ports are `a[N-1:0]`, `b[N-1:0]`, `s[2:0]` and `cin` (inputs),
and `f[N-1:0]` and `cout` (outputs).

## Simulation

Each testbench in `tb/` is self-checking. It ends by printing
`TB_RESULT checks=<n> failures=<m>`, and a watchdog stops it if it hangs.
To run one with Verilator:

    verilator --binary --timing --assert -y rtl -y tb rtl/rl_pkg.sv \
        tb/tb_ft_alu.sv --top-module tb_ft_alu
    ./obj_dir/Vtb_ft_alu

| testbench | what it covers |
|-----------|----------------|
| `tb_gate_*` | every input vector; the equations, checked against independently written models; parity and reversibility, except for the PPPG |
| `tb_pp_toffoli_*`, `tb_fa_*`, `tb_ft_full_adder` | exhaustive; `tb_ft_full_adder` covers all five adders |
| `tb_ripple_carry_adder`, `tb_arith_circuit`, `tb_logic_*`, `tb_alu_design1`, `tb_alu_design2` | exhaustive at 4 bits, plus random vectors at 8 bits |
| `tb_function_selector`, `tb_alu2_slice`, `tb_frg_mux4`, `tb_y_select` | exhaustive |
| `tb_ft_alu` | the top at default parameters, all 4096 operations; counts carries, borrows, full-length carry ripples and logic-mode carry blocking, and fails if any never occurs |
| `tb_ft_alu_variants` | both designs × five adders at 1, 4 and 8 bits |
| `tb_paper_waveforms` | the operand and result values printed in the published component simulations |

The reference model is `tb/tb_alu_ref_pkg.sv`. It follows the operation
table (A + 1, A − B, A − 1, …) rather than the adder structure.
