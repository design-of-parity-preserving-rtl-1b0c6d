// rl_pkg: types shared by the fault tolerant reversible ALU.
//
// fa_kind_e names the fault tolerant full adder structure that every adder
// cell of the design is built from. The structures are the ones the ALU can
// be assembled with interchangeably: the generalized adder of two parity
// preserving Toffoli structures plus two double Feynman gates (with either
// Toffoli structure), the two-Islam-gate adder, and the single-gate PPPG and
// F2PG adders. toffoli_kind_e picks the Toffoli structure inside the
// generalized adder. The default of FA_F2PG is a choice of this design: the
// F2PG and PPPG adders tie on gate count, and only F2PG, as its equations
// are given, is parity preserving.
package rl_pkg;

  typedef enum logic [2:0] {
    FA_GEN_TOF_FRG = 3'd0,  // generalized adder, Toffoli from FRG + F2G
    FA_GEN_TOF_F2G = 3'd1,  // generalized adder, Toffoli from 2 F2G + FRG
    FA_IG          = 3'd2,  // two Islam gates
    FA_PPPG        = 3'd3,  // one PPPG, two constant zeros
    FA_F2PG        = 3'd4   // one F2PG, two constant zeros
  } fa_kind_e;

  typedef enum logic {
    TOF_FRG = 1'b0,         // Fredkin + double Feynman (3 lines + 1 constant)
    TOF_F2G = 1'b1          // double Feynman + Fredkin + double Feynman
  } toffoli_kind_e;

endpackage
