// tb_fa_generalized: exhaustive test of the generalized fault tolerant full
// adder, once with each parity preserving Toffoli structure inside. For all
// 8 values of (a, b, cin), {cout, sum} must equal a + b + cin.
module tb_fa_generalized;
  import rl_pkg::*;
  logic a, b, cin;
  logic [1:0] sum, cout;
  int checks = 0, failures = 0;

  fa_generalized #(.TOFFOLI(TOF_FRG)) dut_frg (.a(a), .b(b), .cin(cin), .sum(sum[0]), .cout(cout[0]));
  fa_generalized #(.TOFFOLI(TOF_F2G)) dut_f2g (.a(a), .b(b), .cin(cin), .sum(sum[1]), .cout(cout[1]));

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
      for (int k = 0; k < 2; k++) begin
        checks++;
        if ({cout[k], sum[k]} !== 2'(total)) begin
          failures++;
          $display("FAIL variant %0d a=%b b=%b cin=%b -> cout=%b sum=%b", k, a, b, cin, cout[k], sum[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
