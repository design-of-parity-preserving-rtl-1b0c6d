// tb_alu_design2: exhaustive test of the 4-bit design 2 ALU: all A, B, the
// eight select codes and both Cin values (4096 vectors). Arithmetic results
// and carry out are compared with the function table, logic results with
// bitwise OR, XOR, AND, NOT A; in logic mode the result must not depend on
// Cin. A second, 8-bit instance built from two-Islam-gate adders is driven
// with 3000 random vectors.
module tb_alu_design2;
  import rl_pkg::*;
  import tb_alu_ref_pkg::*;
  logic [3:0] a, b, f;
  logic [7:0] a8, b8, f8;
  logic [2:0] s;
  logic       cin, cout, cout8;
  int checks = 0, failures = 0;

  alu_design2                       dut  (.a(a),  .b(b),  .s(s), .cin(cin), .f(f),  .cout(cout));
  alu_design2 #(.N(8), .FA(FA_IG))  dut8 (.a(a8), .b(b8), .s(s), .cin(cin), .f(f8), .cout(cout8));

  task automatic check(input int unsigned n, input longint unsigned av, bv, fv, input logic cv);
    longint unsigned ef;
    logic ec;
    checks++;
    if (!s[2]) begin
      arith_ref(n, av, bv, s[1], s[0], cin, ef, ec);
      if (fv != ef || cv !== ec) begin
        failures++;
        $display("FAIL N=%0d s=%b cin=%b a=%0d b=%0d -> f=%0d cout=%b, expected %0d %b", n, s, cin, av, bv, fv, cv, ef, ec);
      end
    end else begin
      ef = logic_ref(n, av, bv, s[1], s[0]);
      if (fv != ef) begin
        failures++;
        $display("FAIL N=%0d s=%b cin=%b a=%0d b=%0d -> f=%0d, expected %0d", n, s, cin, av, bv, fv, ef);
      end
    end
  endtask

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a8 = '0; b8 = '0;
    for (int v = 0; v < 4096; v++) begin
      {s, cin, a, b} = v[11:0];
      #1;
      check(4, a, b, f, cout);
    end
    for (int v = 0; v < 3000; v++) begin
      a8 = 8'($urandom); b8 = 8'($urandom); s = 3'($urandom); cin = 1'($urandom);
      #1;
      check(8, a8, b8, f8, cout8);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
