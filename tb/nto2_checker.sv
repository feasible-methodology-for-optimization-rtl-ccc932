// nto2_checker -- exhaustive stimulus and reference checker for an n:2
// reversible compressor of width N (testbench helper).
//
// Drives every combination of the N inputs and N-3 carry-ins onto a
// compressor and checks its outputs against a reference computed from bit
// counts: gate k of the chain sees (running parity, next input, next
// carry-in), so cout[k] = (that count >= 2), the running parity moves on,
// and sum is the parity of everything.  It also checks
//   - the count identity  sum(in) + sum(cin) = sum + 2*sum(cout),
//   - the R garbage outputs (go[2k-1] passes in[3] for k = 1, else
//     cin[k-1]) and the S garbage outputs (inverted borrows),
//   - that no two input vectors give the same output vector (the map,
//     with its constant inputs, is one-to-one).
// It counts how often each mechanism of the design occurs -- each carry
// cout[k] being generated, the sum being 1, a carry-in changing the sum, and
// the all-carries case -- and counts a failure for one that never occurs.
// After the sweep it raises done; checks and failures are then final.
module nto2_checker #(
  parameter int unsigned N = 5
) (
  output logic [N:1]     in,
  output logic [N-3:1]   cin,
  input  logic [N-2:1]   cout,
  input  logic           sum,
  input  logic [2*N-4:1] go,
  output int             checks,
  output int             failures,
  output logic           done
);

  localparam int unsigned IN_BITS  = 2 * N - 3;
  localparam int unsigned OUT_BITS = 3 * N - 5;

  int unsigned carry_seen [N-2:1];
  int unsigned sum_seen;
  int unsigned all_carries_seen;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20)
        $display("FAIL N=%0d %s: in=%b cin=%b -> cout=%b sum=%b go=%b",
                 N, what, in, cin, cout, sum, go);
    end
  endtask

  initial begin : sweep
    bit seen [longint unsigned];
    int parity, cnt, total, ones, r_exp, s_exp, b_in, c_in;
    logic [OUT_BITS-1:0] outv;

    checks = 0;
    failures = 0;
    done = 1'b0;
    sum_seen = 0;
    all_carries_seen = 0;
    for (int k = 1; k <= int'(N) - 2; k++) carry_seen[k] = 0;

    for (longint unsigned v = 0; v < (longint'(1) << IN_BITS); v++) begin
      {cin, in} = IN_BITS'(v);
      #1;
      // Reference chain.
      parity = (int'(in[1]) + int'(in[2]) + int'(in[3])) % 2;
      cnt    = int'(in[1]) + int'(in[2]) + int'(in[3]);
      check(cout[1] == (cnt >= 2), "cout[1]");
      check(go[1] == in[3], "R of gate 1");
      check(go[2] == (int'(in[1]) - int'(in[2]) - int'(in[3]) >= 0), "S of gate 1");
      for (int k = 2; k <= int'(N) - 2; k++) begin
        b_in = int'(in[k+2]);
        c_in = int'(cin[k-1]);
        cnt  = parity + b_in + c_in;
        r_exp = c_in;
        s_exp = (parity - b_in - c_in >= 0) ? 1 : 0;
        check(cout[k] == (cnt >= 2), $sformatf("cout[%0d]", k));
        check(int'(go[2*k-1]) == r_exp, $sformatf("R of gate %0d", k));
        check(int'(go[2*k]) == s_exp, $sformatf("S of gate %0d", k));
        parity = cnt % 2;
      end
      check(int'(sum) == parity, "sum");

      total = 0;
      for (int k = 1; k <= int'(N); k++) total += int'(in[k]);
      for (int k = 1; k <= int'(N) - 3; k++) total += int'(cin[k]);
      ones = 0;
      for (int k = 1; k <= int'(N) - 2; k++) ones += int'(cout[k]);
      check(total == int'(sum) + 2 * ones, "count identity");

      outv = {cout, sum, go};
      check(!seen.exists(longint'(outv)), "output vector repeated");
      seen[longint'(outv)] = 1'b1;

      // Mechanism counters.
      for (int k = 1; k <= int'(N) - 2; k++) if (cout[k]) carry_seen[k]++;
      if (sum) sum_seen++;
      if (&cout) all_carries_seen++;
    end

    for (int k = 1; k <= int'(N) - 2; k++)
      check(carry_seen[k] > 0, $sformatf("mechanism: carry cout[%0d] generated", k));
    check(sum_seen > 0, "mechanism: sum bit set");
    check(all_carries_seen > 0, "mechanism: every carry set at once");
    $display("N=%0d: %0d vectors; carry counts:", N, longint'(1) << IN_BITS);
    for (int k = 1; k <= int'(N) - 2; k++)
      $display("  cout[%0d] = 1 in %0d vectors", k, carry_seen[k]);
    $display("  sum = 1 in %0d vectors, all carries = 1 in %0d vectors",
             sum_seen, all_carries_seen);
    done = 1'b1;
  end

endmodule
