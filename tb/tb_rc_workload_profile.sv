// tb_rc_workload_profile: the time-profiling workload at full size.
//
// Random circuits on up to 8 qubits with 100 two-qubit gate cycles, each
// measured for 1000 shots with a fresh randomization per shot (the
// fully randomized limit). Here one depth-100 circuit is run on each of
// the four qubit pairs of an 8-qubit rc_top for 1000 shots, and every shot
// is checked against the bare circuit. See rc_top_harness.
`timescale 1ns/1ps
module tb_rc_workload_profile;
  logic done;
  int   checks, failures;

  initial begin
    wait (done === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rc_top_harness #(.SHOTS(1000), .SPC(1000), .DMIN(100), .DMAX(100), .GATE_MASK(4'b1111),
                   .WATCHDOG(20000000), .LABEL("profile")) h (
    .done     (done),
    .checks   (checks),
    .failures (failures)
  );
endmodule
