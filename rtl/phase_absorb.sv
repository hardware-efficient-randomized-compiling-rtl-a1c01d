// phase_absorb: folds two Pauli gates into one virtual-Z phase of a U3.
//
// With U3 = Z(phi2) X90 Z(phi1) X90 Z(phi0), the product P_i U3 P'_{i-1}
// (current twirl on the left, inversion of the previous twirl on the
// right) equals, up to global phase, Z(phi2') X90 Z(phi1') X90 Z(phi0')
// where each phi_n' is phi_n, -phi_n, pi - phi_n or pi + phi_n. Which one
// depends only on (P_i, P'_{i-1}, n): a 64-entry map (4 x 4 x 3 used
// entries). The map below was obtained for Z(phi) = diag(1, e^{i phi}) and
// X90 = exp(-i pi X / 4) by checking every candidate against the 2x2
// matrix product; its entries do not change if the sign convention of Z is
// flipped. Rows are P_i, columns P'_{i-1}, each entry gives f for
// (phi2, phi1, phi0):
//
//          P'=I          P'=X          P'=Y          P'=Z
//   P=I   (id,id,id)    (id,pi+,pi-)  (id,pi+,neg)  (id,id,pi+)
//   P=X   (neg,pi-,pi+) (neg,neg,neg) (neg,neg,pi-) (neg,pi-,id)
//   P=Y   (neg,pi+,id)  (neg,id,pi-)  (neg,id,neg)  (neg,pi+,pi+)
//   P=Z   (id,neg,pi+)  (id,pi-,neg)  (id,pi-,pi-)  (id,neg,id)
//
// Phases are unsigned fixed point, one full turn = 2^PHASE_W, so
// pi = 2^(PHASE_W-1) and all arithmetic wraps modulo 2 pi for free.
//
// Interface: purely combinational; p_twirl_i (P_i), p_inv_i (P'_{i-1}),
// slot_i (n), phase_i in, phase_o and fn_o (the chosen function) out.
//
// Follows the paper: the decomposition, the 64-element map and the four
// functions. This design's own choices: the map entries where more than one
// is valid, the phase format, and slot code 3 passing the phase through.
module phase_absorb
  import rc_pkg::*;
#(
  parameter int unsigned PHASE_W = 32
) (
  input  pauli_e             p_twirl_i,
  input  pauli_e             p_inv_i,
  input  u3_slot_e           slot_i,
  input  logic [PHASE_W-1:0] phase_i,
  output absorb_fn_e         fn_o,
  output logic [PHASE_W-1:0] phase_o
);

  localparam logic [PHASE_W-1:0] PI = {1'b1, {(PHASE_W-1){1'b0}}};

  // One row of the map: the functions for phi2, phi1, phi0.
  typedef struct packed {
    absorb_fn_e f2;
    absorb_fn_e f1;
    absorb_fn_e f0;
  } fn_row_t;

  function automatic fn_row_t absorb_row(pauli_e p, pauli_e q);
    unique case ({p, q})
      {PAULI_I, PAULI_I}: return '{FN_ID,  FN_ID,       FN_ID};
      {PAULI_I, PAULI_X}: return '{FN_ID,  FN_PI_PLUS,  FN_PI_MINUS};
      {PAULI_I, PAULI_Y}: return '{FN_ID,  FN_PI_PLUS,  FN_NEG};
      {PAULI_I, PAULI_Z}: return '{FN_ID,  FN_ID,       FN_PI_PLUS};
      {PAULI_X, PAULI_I}: return '{FN_NEG, FN_PI_MINUS, FN_PI_PLUS};
      {PAULI_X, PAULI_X}: return '{FN_NEG, FN_NEG,      FN_NEG};
      {PAULI_X, PAULI_Y}: return '{FN_NEG, FN_NEG,      FN_PI_MINUS};
      {PAULI_X, PAULI_Z}: return '{FN_NEG, FN_PI_MINUS, FN_ID};
      {PAULI_Y, PAULI_I}: return '{FN_NEG, FN_PI_PLUS,  FN_ID};
      {PAULI_Y, PAULI_X}: return '{FN_NEG, FN_ID,       FN_PI_MINUS};
      {PAULI_Y, PAULI_Y}: return '{FN_NEG, FN_ID,       FN_NEG};
      {PAULI_Y, PAULI_Z}: return '{FN_NEG, FN_PI_PLUS,  FN_PI_PLUS};
      {PAULI_Z, PAULI_I}: return '{FN_ID,  FN_NEG,      FN_PI_PLUS};
      {PAULI_Z, PAULI_X}: return '{FN_ID,  FN_PI_MINUS, FN_NEG};
      {PAULI_Z, PAULI_Y}: return '{FN_ID,  FN_PI_MINUS, FN_PI_MINUS};
      default:            return '{FN_ID,  FN_NEG,      FN_ID};   // Z, Z
    endcase
  endfunction

  fn_row_t row;

  always_comb begin
    row = absorb_row(p_twirl_i, p_inv_i);
    unique case (slot_i)
      SLOT_PHI0: fn_o = row.f0;
      SLOT_PHI1: fn_o = row.f1;
      SLOT_PHI2: fn_o = row.f2;
      default:   fn_o = FN_ID;
    endcase
    unique case (fn_o)
      FN_ID:       phase_o = phase_i;
      FN_NEG:      phase_o = -phase_i;
      FN_PI_MINUS: phase_o = PI - phase_i;
      default:     phase_o = PI + phase_i;
    endcase
  end

endmodule
