// tb_logic_circuit: exhaustive test of the 4-bit logic circuit (all A, B,
// selects) against bitwise OR, XOR, AND and NOT A.
module tb_logic_circuit;
  import tb_alu_ref_pkg::*;
  logic [3:0] a, b, f;
  logic       s1, s0;
  int checks = 0, failures = 0;

  logic_circuit dut (.a(a), .b(b), .s1(s1), .s0(s0), .f(f));

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 1024; v++) begin
      {s1, s0, a, b} = v[9:0];
      #1;
      checks++;
      if (f !== 4'(logic_ref(4, a, b, s1, s0))) begin
        failures++; $display("FAIL sel=%b%b a=%b b=%b f=%b", s1, s0, a, b, f);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
