// tb_rev_compressor_nto2 -- end-to-end testbench of the top level, the n:2
// compressor, at its default size (N = 5: five inputs, two carry-ins).
//
// The compressor is instantiated with its default parameters and driven by
// nto2_checker through all 128 input combinations; the checker compares
// every output with a bit-count reference, checks that the input/output map
// is one-to-one, and counts each mechanism (every carry generated, sum set,
// all carries set).  It also checks the structural counts that rev_pkg
// gives for N = 5: 3 gates, 3 constant inputs, 6 garbage outputs,
// quantum cost 30.  A watchdog ends a hung run with a failure.
module tb_rev_compressor_nto2;

  localparam int unsigned N = 5;

  logic [N:1]     in;
  logic [N-3:1]   cin;
  logic [N-2:1]   cout;
  logic           sum;
  logic [2*N-4:1] go;
  int             chk_checks, chk_failures;
  logic           chk_done;
  int             checks = 0;
  int             failures = 0;

  rev_compressor_nto2 dut (
    .in  (in),
    .cin (cin),
    .cout(cout),
    .sum (sum),
    .go  (go)
  );

  nto2_checker #(.N(N)) chk (
    .in      (in),
    .cin     (cin),
    .cout    (cout),
    .sum     (sum),
    .go      (go),
    .checks  (chk_checks),
    .failures(chk_failures),
    .done    (chk_done)
  );

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks + chk_checks, failures + chk_failures);
    $finish;
  end

  initial begin : main
    checks++;
    if (!(rev_pkg::nto2_gates(N) == 3 && rev_pkg::nto2_constant_inputs(N) == 3
          && rev_pkg::nto2_garbage_outputs(N) == 6 && rev_pkg::nto2_quantum_cost(N) == 30)) begin
      failures++;
      $display("FAIL structural counts for N = 5");
    end
    @(posedge chk_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks + chk_checks, failures + chk_failures);
    $finish;
  end

endmodule
