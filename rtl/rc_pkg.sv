// rc_pkg: types and constants shared by the gateware randomized-compiling
// (RC) blocks.
//
// Randomized compiling surrounds every two-qubit gate cycle with random
// Pauli gates (the "twirl") and their inverses, and folds both into the
// neighbouring single-qubit gates. Every single-qubit gate is written as
// U3 = Z(phi2) X90 Z(phi1) X90 Z(phi0), so folding a Pauli into it only
// changes the three virtual-Z phases. The types below describe
//   * a single-qubit Pauli (2 bits, the twirl draw of one qubit),
//   * the two-qubit gate that preceded the current single-qubit cycle and
//     this qubit's role in it,
//   * the slot n of the U3 phase being modified,
//   * the four phase functions phi, -phi, pi-phi, pi+phi,
//   * the metadata that travels with an rc_alu instruction, and
//   * the decoded RC instruction handed from a processor core to its
//     RC execution unit.
//
// Following the paper: the Pauli set {I, X, Y, Z}, the 2-bit draw per
// qubit, the gate set CNOT / CZ / identity, the phase slot n in {0,1,2}
// and the four phase functions. This design's own choices: the numeric
// encodings, the split of CNOT into control and target roles, the NONE
// gate code (no earlier twirl, used for the first cycle of a circuit), the
// no_twirl flag (used for the last single-qubit cycle), the 4-bit qubit
// index (at most MAX_QUBITS qubits) and the instruction bundle layout.
package rc_pkg;

  localparam int unsigned MAX_QUBITS = 16;
  localparam int unsigned QIDX_W     = 4;   // $clog2(MAX_QUBITS)
  localparam int unsigned REG_IDX_W  = 4;   // 16 core phase registers

  // Single-qubit Pauli, in the order of the set {I, X, Y, Z}.
  typedef enum logic [1:0] {
    PAULI_I = 2'd0,
    PAULI_X = 2'd1,
    PAULI_Y = 2'd2,
    PAULI_Z = 2'd3
  } pauli_e;

  // Two-qubit gate of the previous cycle, seen from this qubit.
  typedef enum logic [2:0] {
    GATE_NONE      = 3'd0,  // no twirl before this cycle: inversion is I
    GATE_ID        = 3'd1,  // qubit idle in the two-qubit cycle
    GATE_CZ        = 3'd2,  // CZ with the partner qubit
    GATE_CNOT_CTRL = 3'd3,  // CNOT, this qubit is the control
    GATE_CNOT_TGT  = 3'd4   // CNOT, this qubit is the target
  } rc_gate_e;

  // Position of a virtual-Z phase inside Z(phi2) X90 Z(phi1) X90 Z(phi0).
  typedef enum logic [1:0] {
    SLOT_PHI0 = 2'd0,
    SLOT_PHI1 = 2'd1,
    SLOT_PHI2 = 2'd2
  } u3_slot_e;

  // The four phase functions a Pauli absorption can need.
  typedef enum logic [1:0] {
    FN_ID       = 2'd0,   // phi
    FN_NEG      = 2'd1,   // -phi
    FN_PI_MINUS = 2'd2,   // pi - phi
    FN_PI_PLUS  = 2'd3    // pi + phi
  } absorb_fn_e;

  // Metadata of one rc_alu instruction (10 bits).
  typedef struct packed {
    u3_slot_e            slot;      // which U3 phase is being modified
    rc_gate_e            gate;      // previous two-qubit gate, own role
    logic [QIDX_W-1:0]   partner;   // partner qubit of that gate
    logic                no_twirl;  // treat the current twirl as I
  } rc_meta_t;

  // Opcodes of the RC execution unit.
  typedef enum logic [0:0] {
    OP_LATCH_RC_CYCLE = 1'b0,
    OP_RC_ALU         = 1'b1
  } rc_op_e;

  // What the core ALU does with the returned phase.
  typedef enum logic [0:0] {
    ALU_WRITE = 1'b0,   // reg <= phase'
    ALU_ADD   = 1'b1    // reg <= reg + phase' (phase accumulator)
  } rc_alu_op_e;

  // One decoded RC instruction (32-bit timestamp and phase fields).
  typedef struct packed {
    rc_op_e                 op;
    logic [31:0]            timestamp;  // latch_rc_cycle trigger time
    logic [31:0]            phase;      // rc_alu initial phase
    rc_meta_t               meta;       // rc_alu metadata
    rc_alu_op_e             alu_op;     // rc_alu: write or accumulate
    logic [REG_IDX_W-1:0]   rd;         // rc_alu destination register
  } rc_instr_t;

  // Pauli <-> symplectic (x, z) bits.
  function automatic logic pauli_x(pauli_e p);
    return (p == PAULI_X) || (p == PAULI_Y);
  endfunction

  function automatic logic pauli_z(pauli_e p);
    return (p == PAULI_Z) || (p == PAULI_Y);
  endfunction

  function automatic pauli_e pauli_from_xz(logic x, logic z);
    unique case ({x, z})
      2'b00:   return PAULI_I;
      2'b10:   return PAULI_X;
      2'b11:   return PAULI_Y;
      default: return PAULI_Z;
    endcase
  endfunction

endpackage
