// tb_frg_mux4: exhaustive test of the Fredkin 4:1 multiplexer: for all 16
// data patterns and 4 selects, y must equal the selected input.
module tb_frg_mux4;
  logic [3:0] i;
  logic       s1, s0, y;
  int checks = 0, failures = 0;

  frg_mux4 dut (.i0(i[0]), .i1(i[1]), .i2(i[2]), .i3(i[3]), .s1(s1), .s0(s0), .y(y));

  initial begin
    #10us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 64; v++) begin
      {s1, s0, i} = v[5:0];
      #1;
      checks++;
      if (y !== i[{s1, s0}]) begin failures++; $display("FAIL i=%b sel=%b%b y=%b", i, s1, s0, y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
