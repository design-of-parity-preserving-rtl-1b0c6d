// tb_fa_ig: exhaustive test of the fa_ig full adder cell: for all 8 values of
// (a, b, cin) the 2-bit result {cout, sum} must equal the integer sum
// a + b + cin.
module tb_fa_ig;
  logic a, b, cin, sum, cout;
  int checks = 0, failures = 0;

  fa_ig dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

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
      checks++;
      if ({cout, sum} !== 2'(total)) begin
        failures++;
        $display("FAIL a=%b b=%b cin=%b -> cout=%b sum=%b, expected %0d", a, b, cin, cout, sum, total);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
