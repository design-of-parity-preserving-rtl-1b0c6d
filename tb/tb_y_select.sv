// tb_y_select: exhaustive test of the Y input generator against its table:
// S1 S0 = 00 -> 0, 01 -> B, 10 -> B', 11 -> 1.
module tb_y_select;
  logic b, s1, s0, y, exp_y;
  int checks = 0, failures = 0;

  y_select dut (.b(b), .s1(s1), .s0(s0), .y(y));

  initial begin
    #10us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {s1, s0, b} = v[2:0];
      #1;
      case ({s1, s0})
        2'b00: exp_y = 1'b0;
        2'b01: exp_y = b;
        2'b10: exp_y = !b;
        default: exp_y = 1'b1;
      endcase
      checks++;
      if (y !== exp_y) begin failures++; $display("FAIL s1=%b s0=%b b=%b y=%b", s1, s0, b, y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
