// tb_ft_alu: end-to-end test of the ALU top at its default parameters
// (4 bits, design 2, F2PG full adders). Every combination of A, B, the
// eight select codes and Cin is applied (4096 operations) and the result
// and carry out are compared with the function table. The test also counts
// how often each mechanism of the ALU was exercised, and counts a failure
// for any that never was:
//   - each of the twelve table rows (transfer and decrement/transfer rows
//     counted by their Cin value),
//   - a carry out of the adder, and a borrow (no carry) in subtraction,
//   - a carry rippling through every slice (A + 1 with A all ones),
//   - the carry chain blocked in logic mode (Cin = 1 leaves the result
//     unchanged).
module tb_ft_alu;
  import rl_pkg::*;
  import tb_alu_ref_pkg::*;
  localparam int unsigned N = 4;

  logic [N-1:0] a, b, f, f_prev;
  logic [2:0]   s;
  logic         cin, cout;
  int checks = 0, failures = 0;
  int op_count [16];
  int n_carry = 0, n_borrow = 0, n_full_ripple = 0, n_blocked = 0;

  ft_alu dut (.a(a), .b(b), .s(s), .cin(cin), .f(f), .cout(cout));

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (op_count[i]) op_count[i] = 0;
    for (int v = 0; v < 4096; v++) begin
      longint unsigned ef;
      logic ec;
      {s, a, b, cin} = v[11:0];
      #1;
      checks++;
      if (!s[2]) begin
        arith_ref(N, a, b, s[1], s[0], cin, ef, ec);
        if (f != ef || cout !== ec) begin
          failures++;
          $display("FAIL s=%b cin=%b a=%0d b=%0d -> f=%0d cout=%b, expected %0d %b", s, cin, a, b, f, cout, ef, ec);
        end
        if (s[1:0] == 2'b01 && cout) n_carry++;
        if (s[1:0] == 2'b10 && !cout) n_borrow++;
        if (s[1:0] == 2'b00 && cin && a == '1 && f == '0 && cout) n_full_ripple++;
      end else begin
        ef = logic_ref(N, a, b, s[1], s[0]);
        if (f != ef) begin
          failures++;
          $display("FAIL s=%b cin=%b a=%0d b=%0d -> f=%0d, expected %0d", s, cin, a, b, f, ef);
        end
        // cin is the fastest-changing input: compare with the cin = 0 result
        if (cin) begin
          checks++;
          if (f !== f_prev) begin
            failures++; $display("FAIL logic result depends on cin s=%b a=%0d b=%0d", s, a, b);
          end else n_blocked++;
        end
      end
      f_prev = f;
      op_count[{s, cin}]++;
    end
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (op_count[i] == 0) begin failures++; $display("FAIL select %b cin %b never applied", i[3:1], i[0]); end
    end
    checks++; if (n_carry == 0)       begin failures++; $display("FAIL no carry out seen"); end
    checks++; if (n_borrow == 0)      begin failures++; $display("FAIL no borrow seen"); end
    checks++; if (n_full_ripple == 0) begin failures++; $display("FAIL no full-length carry ripple seen"); end
    checks++; if (n_blocked == 0)     begin failures++; $display("FAIL carry blocking never exercised"); end
    $display("mechanisms: carry=%0d borrow=%0d full_ripple=%0d carry_blocked=%0d", n_carry, n_borrow, n_full_ripple, n_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
