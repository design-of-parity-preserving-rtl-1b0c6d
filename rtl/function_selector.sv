// function_selector: per-bit input stage of design 2. From A_i, B_i, C_i and
// the select lines it forms the three full adder inputs
//   X_i = A_i + S2 S0' (S1 xor B_i)
//   Y_i = S0 B_i + S1 B_i'
//   Z_i = S2' C_i
// so that the following full adder computes every operation: with S2 = 0 it
// is the arithmetic circuit (X = A, Z = carry in), with S2 = 1 the carry is
// blocked (Z = 0) and X xor Y is OR, XOR, AND or NOT A.
//
// Gate netlist (seven parity preserving gates):
//   F2G(B, 0, 0)               two copies of B
//   F2G(S1, B, 0)              S1 xor B
//   NFT(0, S0, S2)             S2 S0' on Q
//   NFT(0, S1 xor B, S2 S0')   S2 S0'(S1 xor B) on R
//   PPPG(A, 1, 1, w, 1)        X = A + w on T
//   FRG(B, S1, S0)             Y on Q
//   NFT(0, S2, C)              Z = S2' C on Q
// The equations and this netlist are the published ones; the select lines
// that some gates pass on (S1, S0, S2 on P outputs) are left as garbage
// here, and select lines fan out by plain wires. Purely combinational.
module function_selector (
  input  logic a, b, c,
  input  logic s2, s1, s0,
  output logic x, y, z
);
  logic b0, b1;                   // copies of B
  logic s1xb;                     // S1 xor B
  logic s2ns0;                    // S2 S0'
  logic w;                        // S2 S0' (S1 xor B)
  logic [14:0] g;                 // garbage lines, left unused

  gate_f2g  u_fan   (.a(b),  .b(1'b0), .c(1'b0), .p(b0),   .q(b1),    .r(g[0]));
  gate_f2g  u_s1xb  (.a(s1), .b(b0),   .c(1'b0), .p(g[1]), .q(s1xb),  .r(g[2]));
  gate_nft  u_s2s0  (.a(1'b0), .b(s0), .c(s2),   .p(g[3]), .q(s2ns0), .r(g[4]));
  gate_nft  u_w     (.a(1'b0), .b(s1xb), .c(s2ns0), .p(g[5]), .q(g[6]), .r(w));
  gate_pppg u_x     (.a(a), .b(1'b1), .c(1'b1), .d(w), .e(1'b1),
                     .p(g[7]), .q(g[8]), .r(g[9]), .s(g[10]), .t(x));
  gate_frg  u_y     (.a(b1), .b(s1), .c(s0), .p(g[12]), .q(y), .r(g[13]));
  gate_nft  u_z     (.a(1'b0), .b(s2), .c(c), .p(g[14]), .q(z), .r(g[11]));
endmodule
