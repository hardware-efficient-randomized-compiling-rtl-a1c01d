// tb_phase_absorb: checks the 64-entry Pauli absorption map.
//
// For every (P_i, P'_{i-1}) pair and many random phase triples, the three
// phases are passed through the block (one slot at a time) and the
// resulting gate U3(phi2', phi1', phi0') is compared with the matrix
// product P_i U3(phi2, phi1, phi0) P'_{i-1}, up to global phase. Phases
// that hit the special values 0 and pi are included, and the exact
// fixed-point results of each function are checked against the returned
// function code.
`timescale 1ns/1ps
module tb_phase_absorb;
  import rc_pkg::*;
  import rc_tb_pkg::*;

  int checks = 0, failures = 0;

  pauli_e      p_twirl, p_inv;
  u3_slot_e    slot;
  logic [31:0] phase_in, phase_out;
  absorb_fn_e  fn;

  phase_absorb dut (
    .p_twirl_i (p_twirl),
    .p_inv_i   (p_inv),
    .slot_i    (slot),
    .phase_i   (phase_in),
    .fn_o      (fn),
    .phase_o   (phase_out)
  );

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic [31:0] ph [3], phn [3];
    cmat         lhs, rhs;
    logic [31:0] exp_v;
    for (int p = 0; p < 4; p++)
      for (int q = 0; q < 4; q++)
        for (int t = 0; t < 40; t++) begin
          for (int n = 0; n < 3; n++) begin
            case (t)
              0:       ph[n] = 32'h0;
              1:       ph[n] = 32'h8000_0000;
              2:       ph[n] = 32'h4000_0000;
              default: ph[n] = $urandom;
            endcase
          end
          p_twirl = pauli_e'(p);
          p_inv   = pauli_e'(q);
          for (int n = 0; n < 3; n++) begin
            slot     = u3_slot_e'(n);
            phase_in = ph[n];
            #1;
            phn[n] = phase_out;
            case (fn)
              FN_ID:       exp_v = ph[n];
              FN_NEG:      exp_v = 32'h0 - ph[n];
              FN_PI_MINUS: exp_v = 32'h8000_0000 - ph[n];
              default:     exp_v = 32'h8000_0000 + ph[n];
            endcase
            check(phase_out == exp_v, $sformatf("fixed-point value P=%0d P'=%0d n=%0d", p, q, n));
          end
          lhs = pauli_m(p);
          lhs = lhs.mul(u3(phase_rad(ph[2]), phase_rad(ph[1]), phase_rad(ph[0])));
          lhs = lhs.mul(pauli_m(q));
          rhs = u3(phase_rad(phn[2]), phase_rad(phn[1]), phase_rad(phn[0]));
          check(same_up_to_phase(lhs, rhs) > 1.0 - 1e-9,
                $sformatf("P=%0d P'=%0d: P U3 P' != U3(phi')", p, q));
        end
    // slot 3 is unused and passes the phase through
    p_twirl = PAULI_X; p_inv = PAULI_Y; slot = u3_slot_e'(3); phase_in = 32'h1234_5678;
    #1;
    check(phase_out == 32'h1234_5678, "unused slot passes phase");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
