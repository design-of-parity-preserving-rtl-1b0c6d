// arith_circuit: N-bit arithmetic circuit. A parallel adder whose A side
// takes A directly (X_i = A_i) and whose B side takes Y_i from a Fredkin
// based y_select per bit, so that S1, S0 and Cin pick one of eight results:
//   S1 S0 Cin: 000 A, 001 A+1, 010 A+B, 011 A+B+1, 100 A+B', 101 A-B,
//              110 A-1, 111 A   (all modulo 2**N; cout is the adder carry).
// Purely combinational: one Fredkin delay, then the carry ripple.
module arith_circuit
  import rl_pkg::*;
#(
  parameter int unsigned N  = 4,
  parameter fa_kind_e    FA = FA_F2PG
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic         s1,
  input  logic         s0,
  input  logic         cin,
  output logic [N-1:0] f,
  output logic         cout
);
  logic [N-1:0] y;

  for (genvar i = 0; i < N; i++) begin : g_y
    y_select u_ysel (.b(b[i]), .s1(s1), .s0(s0), .y(y[i]));
  end

  ripple_carry_adder #(.N(N), .FA(FA)) u_rca (.x(a), .y(y), .cin(cin), .f(f), .cout(cout));
endmodule
