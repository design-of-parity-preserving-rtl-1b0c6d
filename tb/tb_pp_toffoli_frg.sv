// tb_pp_toffoli_frg: exhaustive test of the Fredkin + double Feynman
// Toffoli structure. For all 8 inputs: r = AB xor C, p = A, q = B, g = AB,
// and the XOR of all four outputs equals the XOR of the three inputs (the
// structure's constant input is 0, so parity is preserved line for line).
module tb_pp_toffoli_frg;
  logic a, b, c, p, q, r, g;
  int checks = 0, failures = 0;

  pp_toffoli_frg dut (.a(a), .b(b), .c(c), .p(p), .q(q), .r(r), .g(g));

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
      if ({p, q, g} !== {a, b, a & b}) begin failures++; $display("FAIL p/q/g in=%b", {a,b,c}); end
      checks++;
      if ((a ^ b ^ c) !== (p ^ q ^ r ^ g)) begin failures++; $display("FAIL parity in=%b", {a,b,c}); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
