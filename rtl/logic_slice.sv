// logic_slice: one bit of the logic circuit. f = A+B, A xor B, AB or A' for
// {s1,s0} = 0, 1, 2, 3.
//
// All four functions are formed at once from parity preserving gates and
// one of them is picked by the Fredkin 4:1 multiplexer:
//   F2G(B, 0, 0)        three copies of B (fan-out)
//   PPPG(A, 1, 1, B, 1) A' on S, A + B on T, A on P, B on R
//   F2G(A, 1, B)        A xor B on R
//   FRG(A, 0, B)        AB on Q
// The gate netlist and the order OR, XOR, AND, NOT on the multiplexer are
// the published ones. Purely combinational.
module logic_slice (
  input  logic a, b, s1, s0,
  output logic f
);
  logic b0, b1, b2;               // copies of B (b1 is a garbage line)
  logic a1, b3;                   // A and B passed on by the PPPG
  logic a2;                       // A passed on by the second F2G
  logic f_or, f_xor, f_and, f_not;
  logic g0, g1, g2, g3;

  gate_f2g  u_fan  (.a(b), .b(1'b0), .c(1'b0), .p(b0), .q(b1), .r(b2));
  gate_pppg u_pppg (.a(a), .b(1'b1), .c(1'b1), .d(b0), .e(1'b1),
                    .p(a1), .q(g0), .r(b3), .s(f_not), .t(f_or));
  gate_f2g  u_xor  (.a(a1), .b(1'b1), .c(b3), .p(a2), .q(g1), .r(f_xor));
  gate_frg  u_and  (.a(a2), .b(1'b0), .c(b2), .p(g2), .q(f_and), .r(g3));

  frg_mux4 u_mux (.i0(f_or), .i1(f_xor), .i2(f_and), .i3(f_not), .s1(s1), .s0(s0), .y(f));
endmodule
