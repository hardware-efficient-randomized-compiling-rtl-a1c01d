// tb_rc_top: end-to-end test of rc_top at its default size (8 qubits,
// 32-bit phases): 40 shots of random two-qubit-gate circuits of depth 1 to
// 8 on four qubit pairs, using CZ, both CNOT directions and idle cycles.
// See rc_top_harness for what is driven and checked.
`timescale 1ns/1ps
module tb_rc_top;
  logic done;
  int   checks, failures;

  initial begin
    wait (done === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rc_top_harness #(.SHOTS(40), .DMIN(1), .DMAX(8), .GATE_MASK(4'b1111), .LABEL("rc_top")) h (
    .done     (done),
    .checks   (checks),
    .failures (failures)
  );
endmodule
