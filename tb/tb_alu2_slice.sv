// tb_alu2_slice: exhaustive test of one design 2 slice (64 vectors). In
// arithmetic mode {cout, f} must be A + Y + C with Y = 0, B, B', 1 by
// S1 S0; in logic mode f must be OR, XOR, AND, NOT A whatever C is.
module tb_alu2_slice;
  logic a, b, c, s2, s1, s0, f, cout, y;
  int checks = 0, failures = 0;

  alu2_slice dut (.a(a), .b(b), .c(c), .s2(s2), .s1(s1), .s0(s0), .f(f), .cout(cout));

  initial begin
    #10us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 64; v++) begin
      {s2, s1, s0, a, b, c} = v[5:0];
      #1;
      checks++;
      if (!s2) begin
        case ({s1, s0})
          2'b00: y = 1'b0;
          2'b01: y = b;
          2'b10: y = !b;
          default: y = 1'b1;
        endcase
        if ({cout, f} !== 2'(int'(a) + int'(y) + int'(c))) begin
          failures++; $display("FAIL arith s=%b%b a=%b b=%b c=%b -> %b%b", s1, s0, a, b, c, cout, f);
        end
      end else begin
        logic e;
        case ({s1, s0})
          2'b00: e = a | b;
          2'b01: e = a ^ b;
          2'b10: e = a & b;
          default: e = ~a;
        endcase
        if (f !== e) begin
          failures++; $display("FAIL logic s=%b%b a=%b b=%b c=%b -> %b", s1, s0, a, b, c, f);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
