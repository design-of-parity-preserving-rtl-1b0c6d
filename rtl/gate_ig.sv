// gate_ig: Islam gate (IG), a 4x4 reversible, parity preserving gate:
// P = A, Q = A xor B, R = AB xor C, S = BD xor B'(A xor D).
//
// The fourth output is written with A xor D, the form under which the gate
// is reversible and parity preserving. A form with A + D is also seen; S is
// only ever a garbage output in this design, so the choice changes no
// result, only the parity property.
//
// Purely combinational. The immediate assertion checks that the XOR of the
// outputs equals the XOR of the inputs.
module gate_ig (
  input  logic a, b, c, d,
  output logic p, q, r, s
);
  always_comb begin
    p = a;
    q = a ^ b;
    r = (a & b) ^ c;
    s = (b & d) ^ (~b & (a ^ d));
    assert ((a ^ b ^ c ^ d) == (p ^ q ^ r ^ s)) else $error("IG parity violated");
  end
endmodule
