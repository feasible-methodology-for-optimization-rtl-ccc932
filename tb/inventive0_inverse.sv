// inventive0_inverse -- inverse of the Inventive0 gate (testbench model).
//
// Every primitive of the Inventive0 cascade (Toffoli, CNOT, NOT) is its own
// inverse, so running the cascade backwards undoes the gate:
//   NOT(D), CNOT(D -> B), Toffoli(A,B -> D), CNOT(B -> A), CNOT(C -> B),
//   Toffoli(B,C -> D).
// Fed with (P, Q, R, S) it returns the gate's original (A, B, C, D).  The
// testbenches place it behind the gate, or behind a whole compressor, to
// show that no input information is lost.  Combinational, no timing.
module inventive0_inverse (
  input  logic p,
  input  logic q,
  input  logic r,
  input  logic s,
  output logic a,
  output logic b,
  output logic c,
  output logic d
);

  logic d1, b1, d2, a1, b2;

  always_comb begin
    d1 = ~s;               // undo NOT(D)
    b1 = q  ^ d1;          // undo CNOT(D -> B)
    d2 = d1 ^ (p & b1);    // undo Toffoli(A,B -> D)
    a1 = p  ^ b1;          // undo CNOT(B -> A)
    b2 = b1 ^ r;           // undo CNOT(C -> B)
    d  = d2 ^ (b2 & r);    // undo Toffoli(B,C -> D)
    a  = a1;
    b  = b2;
    c  = r;
  end

endmodule
