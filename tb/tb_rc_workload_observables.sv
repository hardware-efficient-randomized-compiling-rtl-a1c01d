// tb_rc_workload_observables: the observable-estimation workload.
//
// 400 random two-qubit circuits, each measured for 1000 shots with one
// randomization per shot. The four qubit pairs of the 8-qubit rc_top each
// run 100 circuits, so 100 rounds of 1000 shots cover the 400 circuits.
// The circuit depth is not stated for this experiment; each circuit here
// draws 1 to 10 two-qubit cycles of CZ, CNOT (both directions) or idle.
// Every shot is checked against its bare circuit. See rc_top_harness.
`timescale 1ns/1ps
module tb_rc_workload_observables;
  logic done;
  int   checks, failures;

  initial begin
    wait (done === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rc_top_harness #(.SHOTS(100000), .SPC(1000), .DMIN(1), .DMAX(10), .GATE_MASK(4'b1111),
                   .WATCHDOG(200000000), .LABEL("observables")) h (
    .done     (done),
    .checks   (checks),
    .failures (failures)
  );
endmodule
