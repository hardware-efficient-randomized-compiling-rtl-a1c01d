// pauli_inv_lut: Pauli propagation through the previous two-qubit gate.
//
// A twirl P = P_self (x) P_partner placed before a Clifford gate G is undone
// by applying P' = G P G^dagger after the gate, and P' is again a two-qubit
// Pauli. For one gate this is a 16-entry table from (P_self, P_partner) to
// P'; this module returns this qubit's half of P'. The table is written in
// closed form on the symplectic bits (x, z) of each Pauli (signs, i.e.
// global phases, are dropped):
//   GATE_NONE      : P' = I                      (no earlier twirl)
//   GATE_ID        : P' = P_self                 (qubit idle)
//   GATE_CZ        : x' = x_s,        z' = z_s ^ x_p
//   GATE_CNOT_CTRL : x' = x_s,        z' = z_s ^ z_p
//   GATE_CNOT_TGT  : x' = x_s ^ x_p,  z' = z_s
// e.g. through a CZ, X on this qubit becomes X (x) Z, so this qubit keeps X
// and the partner picks up Z.
//
// Interface: purely combinational, gate_i, p_self_i, p_partner_i in,
// p_inv_o out.
//
// Follows the paper: the 16-element lookup table per two-qubit Clifford and
// the gates CNOT, CZ and identity. This design's own choices: returning
// only this qubit's Pauli, the CNOT role split and the NONE code.
module pauli_inv_lut
  import rc_pkg::*;
(
  input  rc_gate_e gate_i,
  input  pauli_e   p_self_i,
  input  pauli_e   p_partner_i,
  output pauli_e   p_inv_o
);

  logic xs, zs, xp, zp;

  always_comb begin
    xs = pauli_x(p_self_i);
    zs = pauli_z(p_self_i);
    xp = pauli_x(p_partner_i);
    zp = pauli_z(p_partner_i);
    unique case (gate_i)
      GATE_NONE:      p_inv_o = PAULI_I;
      GATE_ID:        p_inv_o = p_self_i;
      GATE_CZ:        p_inv_o = pauli_from_xz(xs,      zs ^ xp);
      GATE_CNOT_CTRL: p_inv_o = pauli_from_xz(xs,      zs ^ zp);
      GATE_CNOT_TGT:  p_inv_o = pauli_from_xz(xs ^ xp, zs);
      default:        p_inv_o = p_self_i;
    endcase
  end

endmodule
