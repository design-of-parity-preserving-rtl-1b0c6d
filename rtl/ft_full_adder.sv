// ft_full_adder: one fault tolerant full adder cell, sum = a xor b xor cin,
// cout = majority(a, b, cin), built from the structure FA names.
//
// All adders of the ALU (ripple carry adder of design 1, the adder stage of
// every design 2 slice) are instances of this cell, so one parameter swaps
// the adder structure throughout. The default, FA_F2PG, is a choice of this
// design (see rl_pkg). Purely combinational.
module ft_full_adder
  import rl_pkg::*;
#(
  parameter fa_kind_e FA = FA_F2PG
) (
  input  logic a, b, cin,
  output logic sum, cout
);
  case (FA)
    FA_GEN_TOF_FRG: begin : g_fa
      fa_generalized #(.TOFFOLI(TOF_FRG)) u_fa (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));
    end
    FA_GEN_TOF_F2G: begin : g_fa
      fa_generalized #(.TOFFOLI(TOF_F2G)) u_fa (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));
    end
    FA_IG: begin : g_fa
      fa_ig u_fa (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));
    end
    FA_PPPG: begin : g_fa
      fa_pppg u_fa (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));
    end
    default: begin : g_fa
      fa_f2pg u_fa (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));
    end
  endcase
endmodule
