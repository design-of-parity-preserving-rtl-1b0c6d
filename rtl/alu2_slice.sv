// alu2_slice: one bit of design 2: the function selector followed by a
// fault tolerant full adder.
//   f    = X_i xor Y_i xor Z_i
//   cout = X_i Y_i + Y_i Z_i + X_i Z_i   (carry to the next slice)
// FA picks the full adder structure (see rl_pkg). Purely combinational.
module alu2_slice
  import rl_pkg::*;
#(
  parameter fa_kind_e FA = FA_F2PG
) (
  input  logic a, b, c,
  input  logic s2, s1, s0,
  output logic f, cout
);
  logic x, y, z;

  function_selector u_fsel (.a(a), .b(b), .c(c), .s2(s2), .s1(s1), .s0(s0), .x(x), .y(y), .z(z));
  ft_full_adder #(.FA(FA)) u_fa (.a(x), .b(y), .cin(z), .sum(f), .cout(cout));
endmodule
