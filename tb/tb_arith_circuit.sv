// tb_arith_circuit: exhaustive test of the 4-bit arithmetic circuit: every
// A, B and each of the eight {S1, S0, Cin} codes, result and carry out
// compared with the function table (transfer, increment, add, add with
// carry, subtract with borrow, subtract, decrement, transfer).
module tb_arith_circuit;
  import tb_alu_ref_pkg::*;
  logic [3:0] a, b, f;
  logic       s1, s0, cin, cout, exp_cout;
  longint unsigned exp_f;
  int checks = 0, failures = 0;

  arith_circuit dut (.a(a), .b(b), .s1(s1), .s0(s0), .cin(cin), .f(f), .cout(cout));

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 2048; v++) begin
      {s1, s0, cin, a, b} = v[10:0];
      #1;
      arith_ref(4, a, b, s1, s0, cin, exp_f, exp_cout);
      checks++;
      if (f !== 4'(exp_f) || cout !== exp_cout) begin
        failures++;
        $display("FAIL s1s0cin=%b%b%b a=%0d b=%0d -> f=%0d cout=%b, expected %0d %b",
                 s1, s0, cin, a, b, f, cout, exp_f, exp_cout);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
