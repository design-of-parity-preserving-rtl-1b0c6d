// gate_frg: Fredkin gate (FRG), a 3x3 reversible, parity preserving
// controlled swap: P = A, Q = A'B + AC, R = A'C + AB. With A as select it is
// a 2:1 multiplexer (Q = B when A = 0, C when A = 1); with C = 0 it gives
// AND on Q.
//
// Purely combinational. The immediate assertion checks that the XOR of the
// outputs equals the XOR of the inputs.
module gate_frg (
  input  logic a, b, c,
  output logic p, q, r
);
  always_comb begin
    p = a;
    q = (~a & b) | (a & c);
    r = (~a & c) | (a & b);
    assert ((a ^ b ^ c) == (p ^ q ^ r)) else $error("FRG parity violated");
  end
endmodule
