// rev_pkg -- types and cost figures shared by the reversible compressor RTL.
//
// The compressors are chains of one 4x4 reversible cell, the Inventive0 gate.
// This package holds the bundle type for one gate's four outputs and the
// published cost of one gate: quantum cost 10 and a logic complexity of
// 7 two-input XORs, 4 two-input ANDs and 3 inverters.  The functions give
// the structural counts of an n:2 compressor built as a chain of n-2 such
// gates (gates, constant inputs, garbage outputs, quantum cost and logic
// complexity).  They are documentation in executable form: the testbenches
// check them against the published figures (4:2: 2 gates, 2 constants,
// 4 garbage, quantum cost 20, 14/8/6 XOR/AND/NOT; 5:2: 3, 3, 6, 30,
// 21/12/9).
//
// The quantum cost of a chain is taken as 10 per gate, 10*(n-2), which
// matches the 4:2 and 5:2 figures.  A closed form of 10*(n-3) is also
// stated for this compressor family, but it contradicts both worked
// examples and is not used.
package rev_pkg;

  // Outputs of one Inventive0 gate, in the order P, Q, R, S.
  typedef struct packed {
    logic p;  // A ^ B ^ C                  (sum / difference)
    logic q;  // maj(A,B,C) ^ D             (carry when D = 0)
    logic r;  // C, passed through          (garbage in a compressor)
    logic s;  // borrow(A-B-C) ^ ~D         (borrow when D = 1)
  } inv0_out_t;

  // Cost of one Inventive0 gate.
  localparam int unsigned INV0_QUANTUM_COST = 10;
  localparam int unsigned INV0_XOR_COUNT    = 7;
  localparam int unsigned INV0_AND_COUNT    = 4;
  localparam int unsigned INV0_NOT_COUNT    = 3;

  // Structural counts of an n:2 compressor made of a chain of gates.
  function automatic int unsigned nto2_gates(int unsigned n);
    return n - 2;
  endfunction

  function automatic int unsigned nto2_constant_inputs(int unsigned n);
    return n - 2;  // one D = 0 ancilla per gate
  endfunction

  function automatic int unsigned nto2_garbage_outputs(int unsigned n);
    return 2 * (n - 2);  // R and S of every gate
  endfunction

  function automatic int unsigned nto2_quantum_cost(int unsigned n);
    return INV0_QUANTUM_COST * (n - 2);
  endfunction

  // Logic complexity T = x*alpha + y*beta + z*delta of the chain, where
  // alpha, beta and delta count two-input XORs, two-input ANDs and NOTs.
  function automatic int unsigned nto2_xor_count(int unsigned n);
    return INV0_XOR_COUNT * (n - 2);
  endfunction

  function automatic int unsigned nto2_and_count(int unsigned n);
    return INV0_AND_COUNT * (n - 2);
  endfunction

  function automatic int unsigned nto2_not_count(int unsigned n);
    return INV0_NOT_COUNT * (n - 2);
  endfunction

endpackage
