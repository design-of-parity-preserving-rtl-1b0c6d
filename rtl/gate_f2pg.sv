// gate_f2pg: F2PG, a 5x5 reversible, parity preserving gate:
// P = AC xor BC', Q = A xor B, R = A xor B xor C,
// S = (A xor B)C xor (AB xor D), T = AB' xor E.
// With D = E = 0 it is a full adder: R is the sum and S the carry out of
// A + B + C.
//
// Purely combinational. The immediate assertion checks that the XOR of the
// outputs equals the XOR of the inputs.
module gate_f2pg (
  input  logic a, b, c, d, e,
  output logic p, q, r, s, t
);
  always_comb begin
    p = (a & c) ^ (b & ~c);
    q = a ^ b;
    r = a ^ b ^ c;
    s = ((a ^ b) & c) ^ ((a & b) ^ d);
    t = (a & ~b) ^ e;
    assert ((a ^ b ^ c ^ d ^ e) == (p ^ q ^ r ^ s ^ t)) else $error("F2PG parity violated");
  end
endmodule
