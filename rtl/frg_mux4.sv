// frg_mux4: 4:1 multiplexer of three Fredkin gates. y = i0, i1, i2, i3 for
// {s1,s0} = 0, 1, 2, 3.
//
// FRG(S0, I0, I1) and FRG(S0, I2, I3) each choose by S0 on their middle
// output (the first gate's P output carries S0 on to the second);
// FRG(S1, first, second) chooses between them by S1. The remaining outputs
// are garbage. Purely combinational, two Fredkin delays.
module frg_mux4 (
  input  logic i0, i1, i2, i3,
  input  logic s1, s0,
  output logic y
);
  logic s0_pass, m01, m23;
  logic g0, g1, g2, g3, g4;

  gate_frg u_lo  (.a(s0),      .b(i0),  .c(i1),  .p(s0_pass), .q(m01), .r(g0));
  gate_frg u_hi  (.a(s0_pass), .b(i2),  .c(i3),  .p(g1),      .q(m23), .r(g2));
  gate_frg u_out (.a(s1),      .b(m01), .c(m23), .p(g3),      .q(y),   .r(g4));
endmodule
