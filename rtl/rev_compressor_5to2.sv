// rev_compressor_5to2 -- reversible 5:2 compressor cell built from three
// Inventive0 gates.
//
// Takes five bits of equal weight I1..I5 and two carry-ins Cin1, Cin2, and
// returns a sum bit S3 and three carries C1, C2, C3 of double weight:
//   I1 + ... + I5 + Cin1 + Cin2 = S3 + 2*(C1 + C2 + C3)
// C1 depends on no carry-in and C2 only on Cin1.
//
// How it works (as published): the first two gates are exactly the 4:2
// cell -- gate 1 on (I1, I2, I3, 0), gate 2 on (S1, I4, Cin1, 0) -- so they
// are instantiated here as one rev_compressor_4to2 with Cin = Cin1.  Gate 3
// takes (S2, I5, Cin2, 0) and gives S3 (P) and C3 (Q).  Gates 3, constant
// inputs 3, garbage outputs 6, quantum cost 30.
//
// Interface: i[k] is input Ik.  go[2k-1], go[2k] are R and S of gate k
// (ordering chosen by this design).  Purely combinational; the longest path
// runs through all three gates.
module rev_compressor_5to2
  import rev_pkg::*;
(
  input  logic [5:1] i,
  input  logic       cin1,
  input  logic       cin2,
  output logic       c1,
  output logic       c2,
  output logic       c3,
  output logic       s3,
  output logic [6:1] go
);


  logic      s2;
  inv0_out_t g3;

  rev_compressor_4to2 u_4to2 (
    .i  (i[4:1]),
    .cin(cin1),
    .c1 (c1),
    .c2 (c2),
    .s2 (s2),
    .go (go[4:1])
  );

  inventive0_gate u_gate3 (
    .a(s2), .b(i[5]), .c(cin2), .d(1'b0),
    .p(g3.p), .q(g3.q), .r(g3.r), .s(g3.s)
  );

  assign c3    = g3.q;
  assign s3    = g3.p;
  assign go[5] = g3.r;
  assign go[6] = g3.s;

endmodule
