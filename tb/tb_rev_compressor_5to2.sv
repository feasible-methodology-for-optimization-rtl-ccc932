// tb_rev_compressor_5to2 -- self-checking testbench for the 5:2 compressor.
//
// Applies all 128 combinations of I1..I5, Cin1 and Cin2 and checks, from
// bit counts:
//   I1+..+I5+Cin1+Cin2 = S3 + 2*(C1+C2+C3),  C1 = (I1+I2+I3 >= 2),
//   C2 = (S1+I4+Cin1 >= 2), C3 = (S2+I5+Cin2 >= 2), S3 = parity of all,
// with Sk the running parity; R outputs pass I3, Cin1, Cin2; S outputs are
// the inverted borrows.  It checks that the 10 output bits are distinct for
// all 128 vectors and that the shared cost functions give 3 gates,
// 3 constants, 6 garbage outputs, quantum cost 30 and T = 21/12/9
// XOR/AND/NOT.  A watchdog ends a hung run.
module tb_rev_compressor_5to2;

  logic [5:1] i;
  logic       cin1, cin2;
  logic       c1, c2, c3, s3;
  logic [6:1] go;
  int         checks = 0;
  int         failures = 0;

  rev_compressor_5to2 dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: i=%b cin1=%b cin2=%b -> c=%b%b%b s3=%b go=%b",
               what, i, cin1, cin2, c1, c2, c3, s3, go);
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
    bit [1023:0] seen;
    int n1, n2, n3, x1, x2, x3, total;
    seen = '0;

    check(rev_pkg::nto2_gates(5) == 3 && rev_pkg::nto2_constant_inputs(5) == 3
          && rev_pkg::nto2_garbage_outputs(5) == 6 && rev_pkg::nto2_quantum_cost(5) == 30
          && rev_pkg::nto2_xor_count(5) == 21 && rev_pkg::nto2_and_count(5) == 12
          && rev_pkg::nto2_not_count(5) == 9, "published cost figures");

    for (int v = 0; v < 128; v++) begin
      {cin2, cin1, i} = 7'(v);
      #1;
      n1 = int'(i[1]) + int'(i[2]) + int'(i[3]);
      x1 = n1 % 2;
      n2 = x1 + int'(i[4]) + int'(cin1);
      x2 = n2 % 2;
      n3 = x2 + int'(i[5]) + int'(cin2);
      x3 = n3 % 2;
      total = n1 + int'(i[4]) + int'(i[5]) + int'(cin1) + int'(cin2);

      check(total == int'(s3) + 2 * (int'(c1) + int'(c2) + int'(c3)), "count preserved");
      check(c1 == (n1 >= 2), "C1");
      check(c2 == (n2 >= 2), "C2");
      check(c3 == (n3 >= 2), "C3");
      check(int'(s3) == x3, "S3 = parity");
      check(go[1] == i[3] && go[3] == cin1 && go[5] == cin2, "R outputs");
      check(go[2] == (int'(i[1]) - int'(i[2]) - int'(i[3]) >= 0)
            && go[4] == (x1 - int'(i[4]) - int'(cin1) >= 0)
            && go[6] == (x2 - int'(i[5]) - int'(cin2) >= 0), "S outputs");
      check(!seen[{c1, c2, c3, s3, go}], "output vector repeated");
      seen[{c1, c2, c3, s3, go}] = 1'b1;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
