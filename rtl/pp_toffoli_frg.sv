// pp_toffoli_frg: parity preserving Toffoli structure made of one Fredkin
// gate and one double Feynman gate.
//
// FRG(A, 0, B) yields A, AB and A'B. F2G(AB, C, A'B) then yields AB
// (garbage), AB xor C and AB xor A'B = B. Outputs: p = A, q = B,
// r = AB xor C (the Toffoli target) and g = AB (garbage). Because both gates
// preserve parity, so does the structure: a xor b xor c equals
// p xor q xor r xor g. Purely combinational.
module pp_toffoli_frg (
  input  logic a, b, c,
  output logic p, q, r, g
);
  logic ab, anb;

  gate_frg u_frg (.a(a), .b(1'b0), .c(b), .p(p), .q(ab), .r(anb));
  gate_f2g u_f2g (.a(ab), .b(c), .c(anb), .p(g), .q(r), .r(q));
endmodule
