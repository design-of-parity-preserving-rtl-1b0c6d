// pp_toffoli_f2g: parity preserving Toffoli structure made of two double
// Feynman gates around one Fredkin gate.
//
// F2G(B, 0, C) yields B twice and B xor C. FRG(A, 0, B) yields A, AB and
// A'B. F2G(B xor C, AB, A'B) then yields B xor C, A'B xor C and AB xor C.
// Outputs: p = A, q = B, r = AB xor C (the Toffoli target), g1 = B xor C
// and g2 = A'B xor C (garbage). Purely combinational.
module pp_toffoli_f2g (
  input  logic a, b, c,
  output logic p, q, r, g1, g2
);
  logic b_copy, bxc, ab, anb;

  gate_f2g u_fan (.a(b), .b(1'b0), .c(c), .p(b_copy), .q(q), .r(bxc));
  gate_frg u_frg (.a(a), .b(1'b0), .c(b_copy), .p(p), .q(ab), .r(anb));
  gate_f2g u_out (.a(bxc), .b(ab), .c(anb), .p(g1), .q(g2), .r(r));
endmodule
