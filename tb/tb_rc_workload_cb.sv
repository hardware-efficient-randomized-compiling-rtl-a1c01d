// tb_rc_workload_cb: the cycle-benchmarking workload.
//
// Cycle benchmarking of one CZ gate: 27 circuits (one per depth per Pauli
// decay), each run for 1000 shots with one randomization per shot. The
// depths are not stated for this experiment; here each circuit draws a
// depth of 2 to 8 CZ cycles. Only CZ gates are used, and the four
// qubit pairs of the 8-qubit rc_top each run their own circuit, so 7
// rounds of 1000 shots give 7 circuits per pair, 28 in all, covering the
// 27. See rc_top_harness.
`timescale 1ns/1ps
module tb_rc_workload_cb;
  logic done;
  int   checks, failures;

  initial begin
    wait (done === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rc_top_harness #(.SHOTS(7000), .SPC(1000), .DMIN(2), .DMAX(8), .GATE_MASK(4'b0010),
                   .WATCHDOG(20000000), .LABEL("cb")) h (
    .done     (done),
    .checks   (checks),
    .failures (failures)
  );
endmodule
