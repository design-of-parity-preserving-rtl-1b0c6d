// logic_circuit: N-bit logic circuit, one logic_slice per bit. Bitwise
// OR, XOR, AND or NOT A for {s1,s0} = 0, 1, 2, 3. No signal passes between
// bits. Purely combinational.
module logic_circuit #(
  parameter int unsigned N = 4
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic         s1,
  input  logic         s0,
  output logic [N-1:0] f
);
  for (genvar i = 0; i < N; i++) begin : g_bit
    logic_slice u_slice (.a(a[i]), .b(b[i]), .s1(s1), .s0(s0), .f(f[i]));
  end
endmodule
