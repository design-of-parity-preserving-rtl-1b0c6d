// fa_f2pg: fault tolerant full adder of a single F2PG with two constant
// zeros.
//
// F2PG(A, B, Cin, 0, 0): R = A xor B xor Cin is the sum and
// S = (A xor B)Cin xor AB the carry out; P, Q and T are garbage. Purely
// combinational.
module fa_f2pg (
  input  logic a, b, cin,
  output logic sum, cout
);
  logic g1, g2, g3;

  gate_f2pg u_f2pg (.a(a), .b(b), .c(cin), .d(1'b0), .e(1'b0),
                    .p(g1), .q(g2), .r(sum), .s(cout), .t(g3));
endmodule
