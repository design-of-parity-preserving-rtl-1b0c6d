// tb_ripple_carry_adder: checks the ripple carry adder at its 4-bit default
// exhaustively (all x, y, cin) and an 8-bit copy built from two-Islam-gate
// cells with 2000 random operand pairs. {cout, f} must equal x + y + cin.
module tb_ripple_carry_adder;
  import rl_pkg::*;
  logic [3:0] x4, y4, f4;
  logic [7:0] x8, y8, f8;
  logic       cin, cout4, cout8;
  int checks = 0, failures = 0;

  ripple_carry_adder                        dut4 (.x(x4), .y(y4), .cin(cin), .f(f4), .cout(cout4));
  ripple_carry_adder #(.N(8), .FA(FA_IG))   dut8 (.x(x8), .y(y8), .cin(cin), .f(f8), .cout(cout8));

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x8 = '0; y8 = '0;
    for (int v = 0; v < 512; v++) begin
      int total;
      {cin, x4, y4} = v[8:0];
      #1;
      total = int'(x4) + int'(y4) + int'(cin);
      checks++;
      if ({cout4, f4} !== 5'(total)) begin
        failures++; $display("FAIL N=4 %0d+%0d+%0d -> %0d", x4, y4, cin, {cout4, f4});
      end
    end
    for (int v = 0; v < 2000; v++) begin
      int total;
      x8 = 8'($urandom); y8 = 8'($urandom); cin = 1'($urandom);
      #1;
      total = int'(x8) + int'(y8) + int'(cin);
      checks++;
      if ({cout8, f8} !== 9'(total)) begin
        failures++; $display("FAIL N=8 %0d+%0d+%0d -> %0d", x8, y8, cin, {cout8, f8});
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
