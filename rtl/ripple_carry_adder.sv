// ripple_carry_adder: N fault tolerant full adders in cascade (the parallel
// adder). f = x + y + cin modulo 2**N, cout = carry out of the top stage.
//
// Stage i adds x[i], y[i] and the carry of stage i-1; stage 0 takes cin.
// The carry ripples through all N cells, so the delay grows linearly with
// N. N = 4 is the width the adder is drawn with; FA picks the adder cell
// structure (see rl_pkg). Purely combinational.
module ripple_carry_adder
  import rl_pkg::*;
#(
  parameter int unsigned N  = 4,
  parameter fa_kind_e    FA = FA_F2PG
) (
  input  logic [N-1:0] x,
  input  logic [N-1:0] y,
  input  logic         cin,
  output logic [N-1:0] f,
  output logic         cout
);
  logic [N:0] c;

  assign c[0] = cin;
  for (genvar i = 0; i < N; i++) begin : g_stage
    ft_full_adder #(.FA(FA)) u_fa (.a(x[i]), .b(y[i]), .cin(c[i]), .sum(f[i]), .cout(c[i+1]));
  end
  assign cout = c[N];
endmodule
