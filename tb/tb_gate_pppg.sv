// tb_gate_pppg: exhaustive self-checking test of the PPPG, published equations (evaluated term by term).
// Every one of the 32 input vectors is applied; each output is compared
// with an independently written model.
// A watchdog ends the run with a failure if it does not finish.
module tb_gate_pppg;
  logic a, b, c, d, e;
  logic p, q, r, s, t;
  logic p_e, q_e, r_e, s_e, t_e;
  int checks = 0, failures = 0;
  bit seen [32];

  gate_pppg dut (.a(a), .b(b), .c(c), .d(d), .e(e), .p(p), .q(q), .r(r), .s(s), .t(t));

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
            p_e = a;
      q_e = (!a && !c) ? b : !b;
      r_e = q_e ^ d;
      s_e = (q_e && d) ^ (a && b) ^ c;
      t_e = (b && e && (a || d)) || (!a && d && (c != e)) || (!b && d && (a || e));
      checks++;
      if ({p, q, r, s, t} !== {p_e, q_e, r_e, s_e, t_e}) begin
        failures++;
        $display("FAIL in=%b got=%b exp=%b", {a, b, c, d, e}, {p, q, r, s, t}, {p_e, q_e, r_e, s_e, t_e});
      end
    end

    // the three input patterns the ALU relies on
    for (int v = 0; v < 4; v++) begin
      {a, b} = v[1:0]; c = 0; d = 0; e = 0;
      for (int k = 0; k < 2; k++) begin
        d = k[0];
        #1;
        checks++;
        if (r !== ((a + b + d) % 2 == 1) || s !== ((a + b + d) >= 2)) begin
          failures++; $display("FAIL PPPG as full adder a=%b b=%b cin=%b r=%b s=%b", a, b, d, r, s);
        end
      end
    end
    for (int v = 0; v < 4; v++) begin
      a = v[1]; d = v[0]; b = 1; c = 1; e = 1;
      #1;
      checks++;
      if (s !== !a || t !== (a || d)) begin
        failures++; $display("FAIL PPPG NOT/OR a=%b d=%b s=%b t=%b", a, d, s, t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
