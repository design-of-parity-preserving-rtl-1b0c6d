// fa_generalized: fault tolerant full adder of the generalized form: two
// parity preserving Toffoli structures and two double Feynman gates.
//
//   Toffoli(A, B, 0)        -> A, B, AB
//   F2G(B, 0, A)            -> A xor B on its third output
//   Toffoli(A xor B, C, AB) -> C, A xor B, Cout = (A xor B)C xor AB
//   F2G(C, 0, A xor B)      -> SUM = A xor B xor C on its third output
//
// TOFFOLI picks the Toffoli structure: TOF_FRG (Fredkin + F2G, 6 gates in
// all) or TOF_F2G (two F2G + Fredkin, 8 gates in all). Garbage outputs stay
// unconnected. Purely combinational.
module fa_generalized
  import rl_pkg::*;
#(
  parameter toffoli_kind_e TOFFOLI = TOF_FRG
) (
  input  logic a, b, cin,
  output logic sum, cout
);
  logic t1_a, t1_b, t1_ab;       // first Toffoli: A, B, AB
  logic axb;                     // A xor B
  logic t2_x, t2_c;              // second Toffoli: A xor B, C passed on
  logic f1_g0, f1_g1, f2_g0, f2_g1;

  if (TOFFOLI == TOF_FRG) begin : g_tof
    logic g_a, g_b;
    pp_toffoli_frg u_t1 (.a(a), .b(b), .c(1'b0), .p(t1_a), .q(t1_b), .r(t1_ab), .g(g_a));
    pp_toffoli_frg u_t2 (.a(axb), .b(cin), .c(t1_ab), .p(t2_x), .q(t2_c), .r(cout), .g(g_b));
  end else begin : g_tof
    logic g_a1, g_a2, g_b1, g_b2;
    pp_toffoli_f2g u_t1 (.a(a), .b(b), .c(1'b0), .p(t1_a), .q(t1_b), .r(t1_ab), .g1(g_a1), .g2(g_a2));
    pp_toffoli_f2g u_t2 (.a(axb), .b(cin), .c(t1_ab), .p(t2_x), .q(t2_c), .r(cout), .g1(g_b1), .g2(g_b2));
  end

  gate_f2g u_xor (.a(t1_b), .b(1'b0), .c(t1_a), .p(f1_g0), .q(f1_g1), .r(axb));
  gate_f2g u_sum (.a(t2_c), .b(1'b0), .c(t2_x), .p(f2_g0), .q(f2_g1), .r(sum));
endmodule
