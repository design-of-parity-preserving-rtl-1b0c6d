// alu_design2: N-bit ALU of design 2, N alu2_slice cells with the carry
// rippling from slice i to slice i+1; slice 0 takes cin.
//
//   s = {S2,S1,S0}. S2 = 0, by S1 S0 Cin: A, A+1, A+B, A+B+1, A-B-1, A-B,
//   A-1, A. S2 = 1, by S1 S0: OR, XOR, AND, NOT A (cin ignored: every slice
//   forces its Z input to 0). cout is the carry out of slice N-1; in logic
//   mode it is X AND Y of that slice and carries no arithmetic meaning.
// Purely combinational.
module alu_design2
  import rl_pkg::*;
#(
  parameter int unsigned N  = 4,
  parameter fa_kind_e    FA = FA_F2PG
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic [2:0]   s,
  input  logic         cin,
  output logic [N-1:0] f,
  output logic         cout
);
  logic [N:0] c;

  assign c[0] = cin;
  for (genvar i = 0; i < N; i++) begin : g_slice
    alu2_slice #(.FA(FA)) u_slice (
      .a(a[i]), .b(b[i]), .c(c[i]), .s2(s[2]), .s1(s[1]), .s0(s[0]),
      .f(f[i]), .cout(c[i+1]));
  end
  assign cout = c[N];
endmodule
