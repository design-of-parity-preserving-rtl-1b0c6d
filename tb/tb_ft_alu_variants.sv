// tb_ft_alu_variants: runs the ALU top in every configuration it offers:
// both designs, each with all five full adder structures, at 1, 4 and 8
// bits (the widths of a single slice and of the 4 and 8 slice extensions).
// The 1 and 4 bit copies are checked exhaustively, the 8 bit copies with
// 4000 random vectors each, against the function table.
module tb_ft_alu_variants;
  import rl_pkg::*;
  import tb_alu_ref_pkg::*;
  localparam int NCFG = 10;     // 2 designs x 5 adder structures

  logic [7:0] a, b;
  logic [2:0] s;
  logic       cin;
  logic [0:0] f1 [NCFG];
  logic [3:0] f4 [NCFG];
  logic [7:0] f8 [NCFG];
  logic       c1 [NCFG], c4 [NCFG], c8 [NCFG];
  int checks = 0, failures = 0;

  for (genvar k = 0; k < NCFG; k++) begin : g_cfg
    localparam int unsigned D = (k < 5) ? 1 : 2;
    localparam fa_kind_e    K = fa_kind_e'(k % 5);
    ft_alu #(.N(1), .DESIGN(D), .FA(K)) u1 (.a(a[0:0]), .b(b[0:0]), .s(s), .cin(cin), .f(f1[k]), .cout(c1[k]));
    ft_alu #(.N(4), .DESIGN(D), .FA(K)) u4 (.a(a[3:0]), .b(b[3:0]), .s(s), .cin(cin), .f(f4[k]), .cout(c4[k]));
    ft_alu #(.N(8), .DESIGN(D), .FA(K)) u8 (.a(a),      .b(b),      .s(s), .cin(cin), .f(f8[k]), .cout(c8[k]));
  end

  task automatic check(input int unsigned n, input int k, input longint unsigned fv, input logic cv);
    longint unsigned m, ef;
    logic ec;
    m = (64'd1 << n) - 1;
    checks++;
    if (!s[2]) begin
      arith_ref(n, a & m, b & m, s[1], s[0], cin, ef, ec);
      if (fv != ef || cv !== ec) begin
        failures++;
        $display("FAIL cfg %0d N=%0d s=%b cin=%b a=%0d b=%0d -> %0d %b, expected %0d %b", k, n, s, cin, a & m, b & m, fv, cv, ef, ec);
      end
    end else begin
      ef = logic_ref(n, a & m, b & m, s[1], s[0]);
      if (fv != ef) begin
        failures++;
        $display("FAIL cfg %0d N=%0d s=%b a=%0d b=%0d -> %0d, expected %0d", k, n, s, a & m, b & m, fv, ef);
      end
    end
  endtask

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4096; v++) begin
      {s, cin, a[3:0], b[3:0]} = v[11:0];
      a[7:4] = 4'($urandom); b[7:4] = 4'($urandom);
      #1;
      for (int k = 0; k < NCFG; k++) begin
        check(4, k, f4[k], c4[k]);
        if (a[3:1] == 0 && b[3:1] == 0) check(1, k, f1[k], c1[k]);
      end
    end
    for (int v = 0; v < 4000; v++) begin
      a = 8'($urandom); b = 8'($urandom); s = 3'($urandom); cin = 1'($urandom);
      #1;
      for (int k = 0; k < NCFG; k++) check(8, k, f8[k], c8[k]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
