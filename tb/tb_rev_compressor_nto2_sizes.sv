// tb_rev_compressor_nto2_sizes -- the n:2 compressor at other sizes.
//
// Runs the exhaustive nto2_checker sweep on three instances of the
// compressor: N = 4 (the 4:2 compressor, 32 vectors), N = 5 (the 5:2
// compressor, 128 vectors) and N = 8 (a longer chain built by the generic
// extension of the 5:2 cell, 8192 vectors).  It also checks the structural
// counts the package gives for each size: N-2 gates, N-2 constant inputs, 2(N-2)
// garbage outputs and quantum cost 10(N-2).  A watchdog ends a hung run.
module tb_rev_compressor_nto2_sizes;

  logic [4:1] in4;  logic [1:1] cin4;  logic [2:1] cout4;  logic sum4;  logic [4:1]  go4;
  logic [5:1] in5;  logic [2:1] cin5;  logic [3:1] cout5;  logic sum5;  logic [6:1]  go5;
  logic [8:1] in8;  logic [5:1] cin8;  logic [6:1] cout8;  logic sum8;  logic [12:1] go8;
  int   ck4, ck5, ck8, fl4, fl5, fl8;
  logic dn4, dn5, dn8;
  int   checks = 0;
  int   failures = 0;

  rev_compressor_nto2 #(.N(4)) dut4 (.in(in4), .cin(cin4), .cout(cout4), .sum(sum4), .go(go4));
  rev_compressor_nto2 #(.N(5)) dut5 (.in(in5), .cin(cin5), .cout(cout5), .sum(sum5), .go(go5));
  rev_compressor_nto2 #(.N(8)) dut8 (.in(in8), .cin(cin8), .cout(cout8), .sum(sum8), .go(go8));

  nto2_checker #(.N(4)) chk4 (.in(in4), .cin(cin4), .cout(cout4), .sum(sum4), .go(go4),
                              .checks(ck4), .failures(fl4), .done(dn4));
  nto2_checker #(.N(5)) chk5 (.in(in5), .cin(cin5), .cout(cout5), .sum(sum5), .go(go5),
                              .checks(ck5), .failures(fl5), .done(dn5));
  nto2_checker #(.N(8)) chk8 (.in(in8), .cin(cin8), .cout(cout8), .sum(sum8), .go(go8),
                              .checks(ck8), .failures(fl8), .done(dn8));

  task automatic count_check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks + ck4 + ck5 + ck8,
             failures + fl4 + fl5 + fl8);
    $finish;
  end

  initial begin : main
    count_check(rev_pkg::nto2_gates(4) == 2 && rev_pkg::nto2_constant_inputs(4) == 2
                && rev_pkg::nto2_garbage_outputs(4) == 4 && rev_pkg::nto2_quantum_cost(4) == 20, "N=4 counts");
    count_check(rev_pkg::nto2_gates(5) == 3 && rev_pkg::nto2_constant_inputs(5) == 3
                && rev_pkg::nto2_garbage_outputs(5) == 6 && rev_pkg::nto2_quantum_cost(5) == 30, "N=5 counts");
    count_check(rev_pkg::nto2_gates(8) == 6 && rev_pkg::nto2_constant_inputs(8) == 6
                && rev_pkg::nto2_garbage_outputs(8) == 12 && rev_pkg::nto2_quantum_cost(8) == 60, "N=8 counts");
    fork
      @(posedge dn4);
      @(posedge dn5);
      @(posedge dn8);
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks + ck4 + ck5 + ck8,
             failures + fl4 + fl5 + fl8);
    $finish;
  end

endmodule
