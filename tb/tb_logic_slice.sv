// tb_logic_slice: exhaustive test of one logic stage: OR, XOR, AND, NOT A
// for S1 S0 = 00, 01, 10, 11.
module tb_logic_slice;
  logic a, b, s1, s0, f, exp_f;
  int checks = 0, failures = 0;

  logic_slice dut (.a(a), .b(b), .s1(s1), .s0(s0), .f(f));

  initial begin
    #10us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      {s1, s0, a, b} = v[3:0];
      #1;
      case ({s1, s0})
        2'b00: exp_f = a || b;
        2'b01: exp_f = a != b;
        2'b10: exp_f = a && b;
        default: exp_f = !a;
      endcase
      checks++;
      if (f !== exp_f) begin failures++; $display("FAIL sel=%b%b a=%b b=%b f=%b", s1, s0, a, b, f); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
