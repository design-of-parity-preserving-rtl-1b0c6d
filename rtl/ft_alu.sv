// ft_alu: top of the fault tolerant reversible ALU. An N-bit combinational
// ALU with seven distinct arithmetic and four logic operations, every gate
// of it a reversible gate, selected by s = {S2,S1,S0} and cin:
//
//   S2 S1 S0 Cin   f
//   0  0  0  0     A              transfer
//   0  0  0  1     A + 1          increment
//   0  0  1  0     A + B          add
//   0  0  1  1     A + B + 1      add with carry
//   0  1  0  0     A - B - 1      subtract with borrow
//   0  1  0  1     A - B          subtract
//   0  1  1  0     A - 1          decrement
//   0  1  1  1     A              transfer
//   1  0  0  x     A | B
//   1  0  1  x     A ^ B
//   1  1  0  x     A & B
//   1  1  1  x     ~A
//
// Arithmetic is modulo 2**N; cout is the adder's carry out (for A - B it is
// 1 when no borrow occurred). DESIGN chooses between the two structures:
// 1 = separate arithmetic and logic circuits joined by a Fredkin
// multiplexer, 2 = function selector feeding one full adder per bit (the
// default, which needs one gate fewer per bit). FA chooses the full adder
// structure. N = 4 is the published width; the defaults DESIGN = 2 and
// FA = FA_F2PG are choices of this implementation. Purely combinational:
// results are valid after the carry has rippled through N cells.
module ft_alu
  import rl_pkg::*;
#(
  parameter int unsigned N      = 4,
  parameter int unsigned DESIGN = 2,
  parameter fa_kind_e    FA     = FA_F2PG
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic [2:0]   s,
  input  logic         cin,
  output logic [N-1:0] f,
  output logic         cout
);
  if (DESIGN == 1) begin : g_alu
    alu_design1 #(.N(N), .FA(FA)) u_alu (.a(a), .b(b), .s(s), .cin(cin), .f(f), .cout(cout));
  end else begin : g_alu
    alu_design2 #(.N(N), .FA(FA)) u_alu (.a(a), .b(b), .s(s), .cin(cin), .f(f), .cout(cout));
  end
endmodule
