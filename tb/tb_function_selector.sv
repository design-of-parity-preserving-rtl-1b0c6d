// tb_function_selector: exhaustive test of the function selector (64 input
// vectors) against its defining equations, each written out as a table:
//   X = A + B for S2 S1 S0 = 100, A + B' for 110, A otherwise
//   Y = 0, B, B', 1 for S1 S0 = 00, 01, 10, 11
//   Z = C when S2 = 0, else 0
module tb_function_selector;
  logic a, b, c, s2, s1, s0, x, y, z;
  logic exp_x, exp_y, exp_z;
  int checks = 0, failures = 0;

  function_selector dut (.a(a), .b(b), .c(c), .s2(s2), .s1(s1), .s0(s0), .x(x), .y(y), .z(z));

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
      // X: only in logic mode with S0 = 0 does B enter: OR gives A + B,
      // AND gives A + B'
      case ({s2, s1, s0})
        3'b100:  exp_x = a || b;
        3'b110:  exp_x = a || !b;
        default: exp_x = a;
      endcase
      case ({s1, s0})
        2'b00: exp_y = 1'b0;
        2'b01: exp_y = b;
        2'b10: exp_y = !b;
        default: exp_y = 1'b1;
      endcase
      exp_z = s2 ? 1'b0 : c;
      checks++;
      if ({x, y, z} !== {exp_x, exp_y, exp_z}) begin
        failures++;
        $display("FAIL s=%b%b%b a=%b b=%b c=%b xyz=%b%b%b expected %b%b%b",
                 s2, s1, s0, a, b, c, x, y, z, exp_x, exp_y, exp_z);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
