// tb_gate_nft: exhaustive self-checking test of the NFT gate: P = A xor B, Q = C ? B' : A, R = C ? B : A.
// Every one of the 8 input vectors is applied; each output is compared
// with an independently written model, the XOR of the outputs with the XOR of the inputs (parity preservation), and the output vectors are checked to be all distinct (reversibility).
// A watchdog ends the run with a failure if it does not finish.
module tb_gate_nft;
  logic a, b, c;
  logic p, q, r;
  logic p_e, q_e, r_e;
  int checks = 0, failures = 0;
  bit seen [8];

  gate_nft dut (.a(a), .b(b), .c(c), .p(p), .q(q), .r(r));

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
            p_e = (a + b) % 2;
      q_e = c ? (!b) : a;
      r_e = c ? b : a;
      checks++;
      if ({p, q, r} !== {p_e, q_e, r_e}) begin
        failures++;
        $display("FAIL in=%b got=%b exp=%b", {a, b, c}, {p, q, r}, {p_e, q_e, r_e});
      end
      checks++;
      if ((^{a, b, c}) != (^{p, q, r})) begin
        failures++;
        $display("FAIL parity in=%b out=%b", {a, b, c}, {p, q, r});
      end
      checks++;
      if (seen[{p, q, r}]) begin
        failures++;
        $display("FAIL output %b produced twice (not reversible)", {p, q, r});
      end
      seen[{p, q, r}] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
