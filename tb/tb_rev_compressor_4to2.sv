// tb_rev_compressor_4to2 -- self-checking testbench for the 4:2 compressor.
//
// Applies all 32 combinations of I1..I4 and Cin.  Expected values are
// computed from bit counts, not from the gate equations:
//   I1+I2+I3+I4+Cin = S2 + 2*(C1+C2),  C1 = (I1+I2+I3 >= 2),
//   S2 = parity of all five inputs, C2 = (S1+I4+Cin >= 2) with S1 the
//   parity of I1..I3; garbage go[1] = I3, go[3] = Cin, and go[2], go[4]
//   are the inverted borrows of I1-I2-I3 and S1-I4-Cin.
// It also checks that the 7 output bits of the 32 vectors are all distinct
// (the cell, with its two constant inputs, stays one-to-one), that two
// inverse gates behind the cell give back I1..I4, Cin and the two zero
// ancillas, and that the shared cost functions give the published counts
// (2 gates, 2 constants, 4 garbage, quantum cost 20, T = 14/8/6
// XOR/AND/NOT).  A watchdog ends a hung run.
module tb_rev_compressor_4to2;

  logic [4:1] i;
  logic       cin;
  logic       c1, c2, s2;
  logic [4:1] go;
  int         checks = 0;
  int         failures = 0;

  rev_compressor_4to2 dut (.*);

  // Inverse of the cell: undo gate 2, then gate 1.
  logic r_s1, r_i4, r_cin, r_d2, r_i1, r_i2, r_i3, r_d1;
  inventive0_inverse inv2 (.p(s2), .q(c2), .r(go[3]), .s(go[4]),
                           .a(r_s1), .b(r_i4), .c(r_cin), .d(r_d2));
  inventive0_inverse inv1 (.p(r_s1), .q(c1), .r(go[1]), .s(go[2]),
                           .a(r_i1), .b(r_i2), .c(r_i3), .d(r_d1));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: i=%b cin=%b -> c1=%b c2=%b s2=%b go=%b", what, i, cin, c1, c2, s2, go);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    bit [127:0] seen;
    int n1, n2, x1, b1, b2;
    seen = '0;

    check(rev_pkg::nto2_gates(4) == 2 && rev_pkg::nto2_constant_inputs(4) == 2
          && rev_pkg::nto2_garbage_outputs(4) == 4 && rev_pkg::nto2_quantum_cost(4) == 20
          && rev_pkg::nto2_xor_count(4) == 14 && rev_pkg::nto2_and_count(4) == 8
          && rev_pkg::nto2_not_count(4) == 6, "published cost figures");

    for (int v = 0; v < 32; v++) begin
      {cin, i} = 5'(v);
      #1;
      n1 = int'(i[1]) + int'(i[2]) + int'(i[3]);
      x1 = n1 % 2;
      n2 = x1 + int'(i[4]) + int'(cin);
      b1 = (int'(i[1]) - int'(i[2]) - int'(i[3]) < 0) ? 1 : 0;
      b2 = (x1 - int'(i[4]) - int'(cin) < 0) ? 1 : 0;

      check(n1 + int'(i[4]) + int'(cin) == int'(s2) + 2 * (int'(c1) + int'(c2)),
            "count preserved");
      check(c1 == (n1 >= 2), "C1 = carry of I1..I3");
      check(c2 == (n2 >= 2), "C2 = carry of S1, I4, Cin");
      check(s2 == 1'((n1 + n2 - x1) % 2), "S2 = parity");
      check(go[1] == i[3] && go[3] == cin, "R outputs pass C inputs");
      check(go[2] == (b1 == 0) && go[4] == (b2 == 0), "S outputs = inverted borrows");
      check(!seen[{c1, c2, s2, go}], "output vector repeated");
      seen[{c1, c2, s2, go}] = 1'b1;
      check({r_i1, r_i2, r_i3, r_i4, r_cin} == {i[1], i[2], i[3], i[4], cin}
            && !r_d1 && !r_d2, "inverse cascade recovers inputs and zero ancillas");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
