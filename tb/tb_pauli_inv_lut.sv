// tb_pauli_inv_lut: checks Pauli propagation through CZ, CNOT and idle.
//
// For every gate code and all 16 twirls P_self (x) P_partner, the 4x4
// matrix G (P_self (x) P_partner) G^dagger is formed and compared, up to
// global phase, with p_inv (x) Q for the four possible partner Paulis Q.
// The block's answer is right if one of them matches. GATE_NONE must give
// I whatever the twirl.
`timescale 1ns/1ps
module tb_pauli_inv_lut;
  import rc_pkg::*;
  import rc_tb_pkg::*;

  int checks = 0, failures = 0;

  rc_gate_e gate;
  pauli_e   p_self, p_partner, p_inv;

  pauli_inv_lut dut (
    .gate_i      (gate),
    .p_self_i    (p_self),
    .p_partner_i (p_partner),
    .p_inv_o     (p_inv)
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

  function automatic cmat gate_m(rc_gate_e g);
    case (g)
      GATE_CZ:        return cz();
      GATE_CNOT_CTRL: return cnot(1'b0);  // self (qubit a) is the control
      GATE_CNOT_TGT:  return cnot(1'b1);  // partner (qubit b) is the control
      default: begin
        cmat m = new(4);
        return m;
      end
    endcase
  endfunction

  initial begin
    rc_gate_e gates [4] = '{GATE_ID, GATE_CZ, GATE_CNOT_CTRL, GATE_CNOT_TGT};
    cmat      g, pp, prop, cand;
    bit       found;
    foreach (gates[gi])
      for (int a = 0; a < 4; a++)
        for (int b = 0; b < 4; b++) begin
          gate = gates[gi]; p_self = pauli_e'(a); p_partner = pauli_e'(b);
          #1;
          g    = gate_m(gate);
          pp   = pauli_m(a);
          pp   = pp.kron(pauli_m(b));
          prop = g.mul(pp);
          prop = prop.mul(g.adj());
          found = 0;
          for (int qq = 0; qq < 4; qq++) begin
            cand = pauli_m(int'(p_inv));
            cand = cand.kron(pauli_m(qq));
            if (same_up_to_phase(prop, cand) > 1.0 - 1e-9) found = 1;
          end
          check(found, $sformatf("gate %s P=%0d,%0d -> %0d", gate.name(), a, b, p_inv));
        end
    gate = GATE_NONE;
    for (int a = 0; a < 4; a++)
      for (int b = 0; b < 4; b++) begin
        p_self = pauli_e'(a); p_partner = pauli_e'(b);
        #1;
        check(p_inv == PAULI_I, "NONE gives I");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
