// gate_nft: NFT gate, a 3x3 reversible, parity preserving gate:
// P = A xor B, Q = B'C xor AC', R = BC xor AC'.
//
// The Q equation follows how the function selector uses the gate: with
// A = 0 the middle output must be B'C (S2'C_i for Z_i, S2 S0' for the
// XOR/AND term). Some statements of the gate write Q as BC' xor AC'; that
// form is neither reversible nor parity preserving, so it is not used here.
//
// Purely combinational. The immediate assertion checks that the XOR of the
// outputs equals the XOR of the inputs.
module gate_nft (
  input  logic a, b, c,
  output logic p, q, r
);
  always_comb begin
    p = a ^ b;
    q = (~b & c) ^ (a & ~c);
    r = (b & c) ^ (a & ~c);
    assert ((a ^ b ^ c) == (p ^ q ^ r)) else $error("NFT parity violated");
  end
endmodule
