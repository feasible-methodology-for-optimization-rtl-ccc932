// inventive0_gate -- the 4x4 reversible "Inventive0" gate.
//
// Function (one-to-one on the 16 input vectors):
//   P = A ^ B ^ C
//   Q = ((A ^ B) & C ^ A & B) ^ D            = majority(A,B,C) ^ D
//   R = C
//   S = (~(A ^ B) & C ^ ~A & B) ^ ~D         = borrow(A - B - C) ^ ~D
// With D = 0 the gate is a full adder (P = sum, Q = carry); with D = 1 it is
// a full subtractor (P = difference, S = borrow).  With C = D = 0 it gives
// XOR/AND on P/Q, with C = 1, D = 0 it gives XNOR/OR.
//
// How it works: the logic is written as the cascade of reversible
// primitives that defines the gate -- on wires (A,B,C,D), in order:
//   Toffoli(B,C -> D), CNOT(C -> B), CNOT(B -> A), Toffoli(A,B -> D),
//   CNOT(D -> B), NOT(D).
// Each step only XORs a function of the other wires onto one wire, so the
// whole map stays invertible.  The cascade, the equations and the truth
// table above are those published for the gate; using the cascade (rather
// than the output equations) as the RTL body is this implementation's choice.
//
// Interface and timing: four 1-bit inputs, four 1-bit outputs, purely
// combinational, no clock or reset.
module inventive0_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic s
);

  // Wire values after each step of the primitive cascade.
  logic b1, a1, d1, d2, b2;

  always_comb begin
    d1 = d  ^ (b & c);    // Toffoli: controls B, C; target D
    b1 = b  ^ c;          // CNOT:    control C;     target B
    a1 = a  ^ b1;         // CNOT:    control B;     target A  -> A^B^C
    d2 = d1 ^ (a1 & b1);  // Toffoli: controls A, B; target D
    b2 = b1 ^ d2;         // CNOT:    control D;     target B
    p  = a1;
    q  = b2;
    r  = c;
    s  = ~d2;             // NOT on D
  end

endmodule
