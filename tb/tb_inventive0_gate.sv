// tb_inventive0_gate -- self-checking testbench for the Inventive0 gate.
//
// Applies all 16 input vectors and compares P, Q, R, S with the gate's
// published 16-row truth table, typed in below row by row.  It then checks
// that the map is one-to-one (16 distinct output vectors) and, with values
// worked out arithmetically, the four published uses of the gate:
// XOR/AND (C = D = 0), XNOR/OR (C = 1, D = 0), full adder (D = 0: P = sum,
// Q = carry) and full subtractor (D = 1: P = difference, S = borrow).
// Finally the gate is cascaded with its inverse, which must return the
// original inputs for every vector.
// A watchdog ends the run with a failure if it has not finished.
module tb_inventive0_gate;

  logic a, b, c, d;
  logic p, q, r, s;
  int   checks = 0;
  int   failures = 0;

  logic ra, rb, rc, rd;

  inventive0_gate dut (.*);

  // Gate followed by its inverse: must give back the inputs.
  inventive0_inverse inv (.p(p), .q(q), .r(r), .s(s), .a(ra), .b(rb), .c(rc), .d(rd));

  // Published truth table, rows in order ABCD = 0000 .. 1111, value {P,Q,R,S}.
  localparam logic [3:0] TRUTH [16] = '{
    4'b0001, 4'b0100, 4'b1010, 4'b1111,
    4'b1000, 4'b1101, 4'b0110, 4'b0011,
    4'b1001, 4'b1100, 4'b0111, 4'b0010,
    4'b0101, 4'b0000, 4'b1110, 4'b1011
  };

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: abcd=%b%b%b%b pqrs=%b%b%b%b", what, a, b, c, d, p, q, r, s);
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
    bit [15:0] seen;
    int unsigned av, bv, cv, total;
    seen = '0;

    for (int v = 0; v < 16; v++) begin
      {a, b, c, d} = 4'(v);
      #1;
      check({p, q, r, s} == TRUTH[v], "truth table row");
      check(!seen[{p, q, r, s}], "output vector repeated (not reversible)");
      seen[{p, q, r, s}] = 1'b1;

      av = 32'(a); bv = 32'(b); cv = 32'(c);
      total = av + bv + cv;
      if (!d) begin
        // Full adder: A + B + C = 2*Q + P.
        check(32'(p) + 2 * 32'(q) == total, "full adder");
        if (!c) begin
          check(p == (a != b), "XOR use");
          check(q == (a && b), "AND use");
        end else begin
          check(p == (a == b), "XNOR use");
          check(q == (a || b), "OR use");
        end
      end else begin
        // Full subtractor: A - B - C = P - 2*S.
        check(int'(av) - int'(bv) - int'(cv) == int'(32'(p)) - 2 * int'(32'(s)),
              "full subtractor");
      end
      check(r == c, "R passes C");
      check({ra, rb, rc, rd} == {a, b, c, d}, "inverse gate recovers inputs");
    end
    check(seen == 16'hFFFF, "all 16 output vectors reached");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
