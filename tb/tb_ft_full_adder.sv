// tb_ft_full_adder: exhaustive test of the selectable full adder cell with
// each of the five adder structures selected. For all 8 values of
// (a, b, cin), {cout, sum} of every instance must equal a + b + cin.
module tb_ft_full_adder;
  import rl_pkg::*;
  logic a, b, cin;
  logic [4:0] sum, cout;
  int checks = 0, failures = 0;

  ft_full_adder #(.FA(FA_GEN_TOF_FRG)) dut0 (.a(a), .b(b), .cin(cin), .sum(sum[0]), .cout(cout[0]));
  ft_full_adder #(.FA(FA_GEN_TOF_F2G)) dut1 (.a(a), .b(b), .cin(cin), .sum(sum[1]), .cout(cout[1]));
  ft_full_adder #(.FA(FA_IG))          dut2 (.a(a), .b(b), .cin(cin), .sum(sum[2]), .cout(cout[2]));
  ft_full_adder #(.FA(FA_PPPG))        dut3 (.a(a), .b(b), .cin(cin), .sum(sum[3]), .cout(cout[3]));
  ft_full_adder                        dut4 (.a(a), .b(b), .cin(cin), .sum(sum[4]), .cout(cout[4]));

  initial begin
    #10us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      int total;
      {a, b, cin} = v[2:0];
      #1;
      total = int'(a) + int'(b) + int'(cin);
      for (int k = 0; k < 5; k++) begin
        checks++;
        if ({cout[k], sum[k]} !== 2'(total)) begin
          failures++;
          $display("FAIL structure %0d a=%b b=%b cin=%b -> cout=%b sum=%b", k, a, b, cin, cout[k], sum[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
