// alu_design1: N-bit ALU of design 1. The arithmetic circuit and the logic
// circuit work side by side on A and B; per bit a Fredkin gate acting as a
// 2:1 multiplexer, FRG(S2, arith_i, logic_i), passes the arithmetic result
// when S2 = 0 and the logic result when S2 = 1.
//
//   s = {S2,S1,S0}; with S2 = 0 the result also depends on cin (see
//   arith_circuit); with S2 = 1: OR, XOR, AND, NOT A for S1 S0 = 0..3.
//   cout is the arithmetic circuit's carry out, whatever S2 is.
//
// One bit of this structure is the single stage ALU: arithmetic stage
// (y_select + full adder), logic stage (logic_slice) and the Fredkin mux.
// The arithmetic/logic select is S2 as in the published block diagram and
// function table (the accompanying text calls it S3). A, B, S1 and S0 fan
// out to both circuits by plain wires, as drawn. Purely combinational.
module alu_design1
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
  logic [N-1:0] f_arith, f_logic;

  arith_circuit #(.N(N), .FA(FA)) u_arith (
    .a(a), .b(b), .s1(s[1]), .s0(s[0]), .cin(cin), .f(f_arith), .cout(cout));

  logic_circuit #(.N(N)) u_logic (
    .a(a), .b(b), .s1(s[1]), .s0(s[0]), .f(f_logic));

  for (genvar i = 0; i < N; i++) begin : g_mux
    logic g_s, g_r;
    gate_frg u_mux (.a(s[2]), .b(f_arith[i]), .c(f_logic[i]), .p(g_s), .q(f[i]), .r(g_r));
  end
endmodule
