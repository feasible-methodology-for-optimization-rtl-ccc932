// rev_compressor_4to2 -- reversible 4:2 compressor cell built from two
// Inventive0 gates.
//
// Takes four bits of equal weight I1..I4 and a carry-in Cin, and returns a
// sum bit S2 of the same weight and two carries C1, C2 of double weight:
//   I1 + I2 + I3 + I4 + Cin = S2 + 2*(C1 + C2)
// C1 does not depend on Cin, so in a row of cells C1 of one column is the
// Cin of the next without a rippling carry chain.
//
// How it works (as published): gate 1 takes (A,B,C,D) = (I1, I2, I3, 0) and
// acts as a full adder: P = S1 = I1^I2^I3, Q = C1 = maj(I1,I2,I3).  Gate 2
// takes (S1, I4, Cin, 0): P = S2, Q = C2.  The two D inputs are the cell's
// two constant (ancilla) inputs; the R and S outputs of both gates are its
// four garbage outputs.  Gates 2, constant inputs 2, garbage outputs 4,
// quantum cost 20.
//
// Interface: i[k] is input Ik.  go[1], go[2] are R and S of gate 1;
// go[3], go[4] are R and S of gate 2 (this bit ordering is this design's
// choice; the garbage lines are brought out so the cell's input/output map
// stays one-to-one).  Purely combinational; the longest path runs through
// both gates.
module rev_compressor_4to2
  import rev_pkg::*;
(
  input  logic [4:1] i,
  input  logic       cin,
  output logic       c1,
  output logic       c2,
  output logic       s2,
  output logic [4:1] go
);


  inv0_out_t g1, g2;

  inventive0_gate u_gate1 (
    .a(i[1]), .b(i[2]), .c(i[3]), .d(1'b0),
    .p(g1.p), .q(g1.q), .r(g1.r), .s(g1.s)
  );

  inventive0_gate u_gate2 (
    .a(g1.p), .b(i[4]), .c(cin), .d(1'b0),
    .p(g2.p), .q(g2.q), .r(g2.r), .s(g2.s)
  );

  assign c1 = g1.q;
  assign c2 = g2.q;
  assign s2 = g2.p;
  assign go = {g2.s, g2.r, g1.s, g1.r};

endmodule
