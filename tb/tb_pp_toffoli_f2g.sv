// tb_pp_toffoli_f2g: exhaustive test of the double Feynman + Fredkin +
// double Feynman Toffoli structure. For all 8 inputs: r = AB xor C, p = A,
// q = B, g1 = B xor C, g2 = A'B xor C, and the XOR of the five outputs
// equals the XOR of the inputs (its two constant inputs are 0).
module tb_pp_toffoli_f2g;
  logic a, b, c, p, q, r, g1, g2;
  int checks = 0, failures = 0;

  pp_toffoli_f2g dut (.a(a), .b(b), .c(c), .p(p), .q(q), .r(r), .g1(g1), .g2(g2));

  initial begin
    #10us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = v[2:0];
      #1;
      checks++;
      if (r !== ((a && b) ? !c : c)) begin failures++; $display("FAIL r in=%b r=%b", {a,b,c}, r); end
      checks++;
      if ({p, q} !== {a, b}) begin failures++; $display("FAIL p/q in=%b", {a,b,c}); end
      checks++;
      if ({g1, g2} !== {b != c, (!a && b) != c}) begin failures++; $display("FAIL garbage in=%b", {a,b,c}); end
      checks++;
      if ((a ^ b ^ c) !== (p ^ q ^ r ^ g1 ^ g2)) begin failures++; $display("FAIL parity in=%b", {a,b,c}); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
