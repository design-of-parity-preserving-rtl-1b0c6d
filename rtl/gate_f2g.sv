// gate_f2g: double Feynman gate (F2G), a 3x3 reversible, parity preserving
// gate: P = A, Q = A xor B, R = A xor C. Used for fan-out (B = C = 0 gives
// three copies of A) and for XOR.
//
// Purely combinational; every reversible gate of the design is a module of
// its own so that the gate-level structure of each block stays visible. The
// immediate assertion checks the gate's defining property: the XOR of its
// outputs equals the XOR of its inputs.
module gate_f2g (
  input  logic a, b, c,
  output logic p, q, r
);
  always_comb begin
    p = a;
    q = a ^ b;
    r = a ^ c;
    assert ((a ^ b ^ c) == (p ^ q ^ r)) else $error("F2G parity violated");
  end
endmodule
