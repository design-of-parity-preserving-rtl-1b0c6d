// tb_gate_f2pg: exhaustive self-checking test of the F2PG: P = C ? A : B, Q = A xor B, R = A xor B xor C, S = maj(A,B,C) xor D, T = AB' xor E.
// Every one of the 32 input vectors is applied; each output is compared
// with an independently written model, the XOR of the outputs with the XOR of the inputs (parity preservation), and the output vectors are checked to be all distinct (reversibility).
// A watchdog ends the run with a failure if it does not finish.
module tb_gate_f2pg;
  logic a, b, c, d, e;
  logic p, q, r, s, t;
  logic p_e, q_e, r_e, s_e, t_e;
  int checks = 0, failures = 0;
  bit seen [32];

  gate_f2pg dut (.a(a), .b(b), .c(c), .d(d), .e(e), .p(p), .q(q), .r(r), .s(s), .t(t));

  initial begin
    #10us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 32; v++) begin
      {a, b, c, d, e} = v[4:0];
      #1;
            p_e = c ? a : b;
      q_e = (a + b) % 2;
      r_e = (a + b + c) % 2;
      s_e = ((a + b + c) >= 2) ^ d;
      t_e = (a && !b) ? !e : e;
      checks++;
      if ({p, q, r, s, t} !== {p_e, q_e, r_e, s_e, t_e}) begin
        failures++;
        $display("FAIL in=%b got=%b exp=%b", {a, b, c, d, e}, {p, q, r, s, t}, {p_e, q_e, r_e, s_e, t_e});
      end
      checks++;
      if ((^{a, b, c, d, e}) != (^{p, q, r, s, t})) begin
        failures++;
        $display("FAIL parity in=%b out=%b", {a, b, c, d, e}, {p, q, r, s, t});
      end
      checks++;
      if (seen[{p, q, r, s, t}]) begin
        failures++;
        $display("FAIL output %b produced twice (not reversible)", {p, q, r, s, t});
      end
      seen[{p, q, r, s, t}] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
