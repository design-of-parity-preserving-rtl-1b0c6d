// fa_ig: fault tolerant full adder of two Islam gates.
//
// IG(A, B, 0, 0) gives A, A xor B and AB. IG(A xor B, Cin, AB, A) then gives
// SUM = A xor B xor Cin on Q and Cout = (A xor B)Cin xor AB on R; its P and
// S outputs are garbage. Purely combinational.
module fa_ig (
  input  logic a, b, cin,
  output logic sum, cout
);
  logic a_pass, axb, ab, g0, g1, g2;

  gate_ig u_ig1 (.a(a), .b(b), .c(1'b0), .d(1'b0), .p(a_pass), .q(axb), .r(ab), .s(g0));
  gate_ig u_ig2 (.a(axb), .b(cin), .c(ab), .d(a_pass), .p(g1), .q(sum), .r(cout), .s(g2));
endmodule
