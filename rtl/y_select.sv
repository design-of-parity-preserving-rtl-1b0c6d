// y_select: the adder's B-side input generator of the arithmetic circuit,
// Y_i = B_i S0 + B_i' S1, as one Fredkin gate FRG(B_i, S1, S0) with Y_i on
// its middle output:
//   S1 S0 = 00 -> 0, 01 -> B_i, 10 -> B_i', 11 -> 1.
// The two other outputs (B_i and B_i'S0 + B_i S1) are garbage. Purely
// combinational.
module y_select (
  input  logic b, s1, s0,
  output logic y
);
  logic g_b, g_r;

  gate_frg u_frg (.a(b), .b(s1), .c(s0), .p(g_b), .q(y), .r(g_r));
endmodule
