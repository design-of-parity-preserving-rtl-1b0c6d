// tb_paper_waveforms: re-applies the operand values that the published
// simulation runs of the components show as printed numbers, and checks the
// printed results.
//   - full adder:  a=0 b=0 cin=1 -> s=1 cout=0
//   - 4-bit ripple carry adder: x = y = 1..9 with the sums 3,4,7,8,B,C,F,0,3;
//     the carry-in of each step is not printed, so the sum must match the
//     adder for one of the two carry-in values; at x = y = 7, cin = 1 the
//     printed values are sum = F, cout = 0
//   - logic slice: s = 0, a = 0, b = 0 -> f = 0
//   - function selector: a=b=c=1, s2=s1=s0=1 -> x=1 y=1 z=0
//   - one-slice ALU, design 1: a=1 b=0 c=0 s=000 -> f=1 cout=0
//   - one-slice ALU, design 2: a=0 b=0 c=0 s=101 -> f=0 cout=0
// Everything at default parameters except the ALUs, which are one slice
// wide as in those runs.
module tb_paper_waveforms;
  logic       fa_a, fa_b, fa_cin, fa_s, fa_cout;
  logic [3:0] x, y, sum;
  logic       cin, cout;
  logic       l_a, l_b, l_f;
  logic [1:0] l_s;
  logic       fs_a, fs_b, fs_c, fs_s2, fs_s1, fs_s0, fs_x, fs_y, fs_z;
  logic [0:0] a1, b1, f1, a2, b2, f2;
  logic [2:0] s1, s2;
  logic       c1, c2, co1, co2;
  int checks = 0, failures = 0;
  logic [3:0] printed_sum [9] = '{4'h3, 4'h4, 4'h7, 4'h8, 4'hB, 4'hC, 4'hF, 4'h0, 4'h3};

  ft_full_adder      u_fa  (.a(fa_a), .b(fa_b), .cin(fa_cin), .sum(fa_s), .cout(fa_cout));
  ripple_carry_adder u_rca (.x(x), .y(y), .cin(cin), .f(sum), .cout(cout));
  logic_slice        u_log (.a(l_a), .b(l_b), .s1(l_s[1]), .s0(l_s[0]), .f(l_f));
  function_selector  u_fs  (.a(fs_a), .b(fs_b), .c(fs_c), .s2(fs_s2), .s1(fs_s1), .s0(fs_s0),
                            .x(fs_x), .y(fs_y), .z(fs_z));
  ft_alu #(.N(1), .DESIGN(1)) u_alu1 (.a(a1), .b(b1), .s(s1), .cin(c1), .f(f1), .cout(co1));
  ft_alu #(.N(1), .DESIGN(2)) u_alu2 (.a(a2), .b(b2), .s(s2), .cin(c2), .f(f2), .cout(co2));

  task automatic expect_eq(input string what, input logic [7:0] got, exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    #10us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {fa_a, fa_b, fa_cin} = 3'b001;
    l_a = 0; l_b = 0; l_s = 2'h0;
    {fs_a, fs_b, fs_c, fs_s2, fs_s1, fs_s0} = 6'b111111;
    a1 = 1; b1 = 0; c1 = 0; s1 = 3'b000;
    a2 = 0; b2 = 0; c2 = 0; s2 = 3'b101;
    x = 7; y = 7; cin = 1;
    #1;
    expect_eq("full adder s", fa_s, 1);
    expect_eq("full adder cout", fa_cout, 0);
    expect_eq("rca sum at 7+7", sum, 4'hF);
    expect_eq("rca cout at 7+7", cout, 0);
    expect_eq("logic slice f", l_f, 0);
    expect_eq("function selector xyz", {fs_x, fs_y, fs_z}, 3'b110);
    expect_eq("ALU 1 f", f1, 1);
    expect_eq("ALU 1 cout", co1, 0);
    expect_eq("ALU 2 f", f2, 0);
    expect_eq("ALU 2 cout", co2, 0);
    for (int k = 1; k <= 9; k++) begin
      logic [3:0] s_c0, s_c1;
      x = 4'(k); y = 4'(k);
      cin = 0; #1; s_c0 = sum;
      cin = 1; #1; s_c1 = sum;
      checks++;
      if (printed_sum[k-1] !== s_c0 && printed_sum[k-1] !== s_c1) begin
        failures++;
        $display("FAIL rca x=y=%0d: printed sum %h, adder gives %h / %h", k, printed_sum[k-1], s_c0, s_c1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
