// tb_gate_ig: exhaustive self-checking test of the Islam gate: P = A, Q = A xor B, R = AB xor C, S = B ? D : A xor D.
// Every one of the 16 input vectors is applied; each output is compared
// with an independently written model, the XOR of the outputs with the XOR of the inputs (parity preservation), and the output vectors are checked to be all distinct (reversibility).
// A watchdog ends the run with a failure if it does not finish.
module tb_gate_ig;
  logic a, b, c, d;
  logic p, q, r, s;
  logic p_e, q_e, r_e, s_e;
  int checks = 0, failures = 0;
  bit seen [16];

  gate_ig dut (.a(a), .b(b), .c(c), .d(d), .p(p), .q(q), .r(r), .s(s));

  initial begin
    #10us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      {a, b, c, d} = v[3:0];
      #1;
            p_e = a;
      q_e = (a + b) % 2;
      r_e = (a && b) ? !c : c;
      s_e = b ? d : ((a + d) % 2);
      checks++;
      if ({p, q, r, s} !== {p_e, q_e, r_e, s_e}) begin
        failures++;
        $display("FAIL in=%b got=%b exp=%b", {a, b, c, d}, {p, q, r, s}, {p_e, q_e, r_e, s_e});
      end
      checks++;
      if ((^{a, b, c, d}) != (^{p, q, r, s})) begin
        failures++;
        $display("FAIL parity in=%b out=%b", {a, b, c, d}, {p, q, r, s});
      end
      checks++;
      if (seen[{p, q, r, s}]) begin
        failures++;
        $display("FAIL output %b produced twice (not reversible)", {p, q, r, s});
      end
      seen[{p, q, r, s}] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
