// gate_pppg: PPPG, a 5x5 gate used three ways in the ALU:
// P = A, Q = A'C' xor B', R = Q xor D, S = Q D xor (AB xor C),
// T = BE(A+D) + A'D(C xor E) + B'D(A+E).
//  - A, B, 0, Cin, 0: R = A xor B xor Cin (sum), S = carry out;
//  - A, 1, 1, D, 1:   S = A' (NOT) and T = A + D (OR).
//
// The equations are taken as published for this gate. Evaluated over all 32
// input vectors they are not a bijection and do not keep the input parity,
// so, unlike the other gate modules, this one carries no parity assertion;
// the outputs the ALU uses are correct for the input patterns above.
//
// Purely combinational.
module gate_pppg (
  input  logic a, b, c, d, e,
  output logic p, q, r, s, t
);
  always_comb begin
    p = a;
    q = (~a & ~c) ^ ~b;
    r = q ^ d;
    s = (q & d) ^ ((a & b) ^ c);
    t = (b & e & (a | d)) | (~a & d & (c ^ e)) | (~b & d & (a | e));
  end
endmodule
