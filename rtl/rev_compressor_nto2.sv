// rev_compressor_nto2 -- reversible n:2 compressor: a chain of n-2
// Inventive0 gates (top level of the design).
//
// Takes N bits of equal weight in[1..N] and N-3 carry-ins cin[1..N-3], and
// returns one sum bit and N-2 carries of double weight:
//   in[1] + ... + in[N] + cin[1] + ... + cin[N-3]
//     = sum + 2*(cout[1] + ... + cout[N-2])
//
// How it works (as published): gate 1 adds in[1], in[2], in[3].  Every
// further gate k (k = 2 .. N-2) adds the sum of gate k-1, one new input
// in[k+2] and one carry-in cin[k-1], and gives carry cout[k].  The sum of
// the last gate is the compressor's sum.  Every gate has D = 0 (one constant
// input per gate) and two garbage outputs (R, S).  Gates N-2, constant
// inputs N-2, garbage outputs 2(N-2).  cout[k] depends only on cin[1..k-1],
// so carries never ripple across a row of such compressors; the critical
// path is the sum chain through all N-2 gates.
//
// Structure: for N = 4 the chain is the 4:2 cell; for N >= 5 it is the 5:2
// cell followed by N-5 more gates.  The default N = 5 is the largest
// compressor worked out in full in the published description; N < 4 is
// rejected at elaboration.  Reusing the 4:2 and 5:2 cells as the head of
// the chain is this design's choice; the resulting gate network is the
// published one.
//
// Interface: go[2k-1], go[2k] are R and S of gate k (ordering chosen by this
// design).  Purely combinational, no clock or reset.
module rev_compressor_nto2
  import rev_pkg::*;
#(
  parameter int unsigned N = 5
) (
  input  logic [N:1]       in,
  input  logic [N-3:1]     cin,
  output logic [N-2:1]     cout,
  output logic             sum,
  output logic [2*N-4:1]   go
);


  // Sum output (P) of every gate of the chain.
  logic [N-2:1] s_chain;

  if (N < 4) begin : g_bad_n
    $error("rev_compressor_nto2: N must be at least 4");
  end else if (N == 4) begin : g_head4
    rev_compressor_4to2 u_head (
      .i  (in[4:1]),
      .cin(cin[1]),
      .c1 (cout[1]),
      .c2 (cout[2]),
      .s2 (s_chain[2]),
      .go (go[4:1])
    );
    assign s_chain[1] = 1'b0;  // internal to the 4:2 cell, not used
  end else begin : g_head5
    rev_compressor_5to2 u_head (
      .i   (in[5:1]),
      .cin1(cin[1]),
      .cin2(cin[2]),
      .c1  (cout[1]),
      .c2  (cout[2]),
      .c3  (cout[3]),
      .s3  (s_chain[3]),
      .go  (go[6:1])
    );
    assign s_chain[2:1] = '0;  // internal to the 5:2 cell, not used

    // Gates 4 .. N-2, each extending the chain by one input and one carry-in.
    for (genvar k = 4; k <= N - 2; k++) begin : g_tail
      inventive0_gate u_gate (
        .a(s_chain[k-1]),
        .b(in[k+2]),
        .c(cin[k-1]),
        .d(1'b0),
        .p(s_chain[k]),
        .q(cout[k]),
        .r(go[2*k-1]),
        .s(go[2*k])
      );
    end
  end

  assign sum = s_chain[N-2];

endmodule
