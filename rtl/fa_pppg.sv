// fa_pppg: full adder of a single PPPG with two constant zeros.
//
// PPPG(A, B, 0, Cin, 0): Q = A xor B, R = A xor B xor Cin is the sum and
// S = (A xor B)Cin xor AB the carry out; P and T are garbage. Purely
// combinational.
module fa_pppg (
  input  logic a, b, cin,
  output logic sum, cout
);
  logic g1, g2, g3;

  gate_pppg u_pppg (.a(a), .b(b), .c(1'b0), .d(cin), .e(1'b0),
                    .p(g1), .q(g2), .r(sum), .s(cout), .t(g3));
endmodule
