// rc_module: per-qubit randomized-compiling unit.
//
// One rc_module sits beside each processor core. It holds two copies of the
// global twirl word (2 bits per qubit, for every qubit):
//   cur  - the twirls drawn for the current gate cycle, P_i,
//   prev - the twirls of the previous gate cycle, used to work out the
//          inversion Paulis P'_{i-1} after the previous two-qubit gates.
// A pulse on latch_i (the latch_rc_cycle trigger, asserted by the core at a
// timestamp shared by all cores) copies cur into prev and the current LFSR
// word into cur. Every module latches the whole word, so it knows the twirl
// of its partner qubit.
//
// An rc_alu request carries one virtual-Z phase phi_n of this qubit's
// U3 = Z(phi2) X90 Z(phi1) X90 Z(phi0) and metadata: the slot n, the
// previous two-qubit gate with this qubit's role in it, the partner qubit,
// and a no_twirl flag. The module
//   1. looks up P'_{i-1} = this qubit's half of G (prev_self (x) prev_partner) G^dagger
//      (pauli_inv_lut), takes P_i = cur_self (or I when no_twirl is set),
//   2. returns phi_n' such that P_i U3 P'_{i-1} = U3(phi2', phi1', phi0')
//      (phase_absorb).
//
// Timing: two-stage pipeline. A request in cycle t is answered with
// resp_valid_o in cycle t+2; one request may be issued every cycle. A
// request in the same cycle as latch_i sees the twirls from before the
// latch. Reset (synchronous, active low) sets both twirl words to all-I.
// Assertions flag a request whose two-qubit gate names no valid partner, or
// whose slot is not one of the three U3 phases.
//
// Follows the paper: latching the LFSR output as the new twirls while
// caching the previous ones, knowledge of every qubit's twirl, and the
// rc_alu operands (phase, previous gate, qubit pair, slot). This design's
// own choices: the two-cycle latency, the no_twirl flag, the NONE gate code
// and the reset state.
module rc_module
  import rc_pkg::*;
#(
  parameter int unsigned N_QUBIT  = 8,
  parameter int unsigned QUBIT_ID = 0,
  parameter int unsigned PHASE_W  = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [2*N_QUBIT-1:0] lfsr_i,
  input  logic                 latch_i,
  input  logic                 req_valid_i,
  input  logic [PHASE_W-1:0]   req_phase_i,
  input  rc_meta_t             req_meta_i,
  output logic                 resp_valid_o,
  output logic [PHASE_W-1:0]   resp_phase_o
);

  initial begin
    assert (N_QUBIT >= 1 && N_QUBIT <= MAX_QUBITS)
      else $error("rc_module: N_QUBIT out of range");
    assert (QUBIT_ID < N_QUBIT) else $error("rc_module: QUBIT_ID out of range");
  end

  // ---------------------------------------------------------------- twirls
  pauli_e cur_q  [N_QUBIT];
  pauli_e prev_q [N_QUBIT];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int q = 0; q < N_QUBIT; q++) begin
        cur_q[q]  <= PAULI_I;
        prev_q[q] <= PAULI_I;
      end
    end else if (latch_i) begin
      for (int q = 0; q < N_QUBIT; q++) begin
        cur_q[q]  <= pauli_e'(lfsr_i[2*q +: 2]);
        prev_q[q] <= cur_q[q];
      end
    end
  end

  // ------------------------------------------- stage 1: resolve the Paulis
  pauli_e p_partner_prev;
  pauli_e p_inv_d;

  always_comb begin
    p_partner_prev = PAULI_I;
    for (int q = 0; q < N_QUBIT; q++)
      if (req_meta_i.partner == QIDX_W'(q)) p_partner_prev = prev_q[q];
  end

  pauli_inv_lut u_inv (
    .gate_i      (req_meta_i.gate),
    .p_self_i    (prev_q[QUBIT_ID]),
    .p_partner_i (p_partner_prev),
    .p_inv_o     (p_inv_d)
  );

  logic               s1_valid_q;
  logic [PHASE_W-1:0] s1_phase_q;
  u3_slot_e           s1_slot_q;
  pauli_e             s1_twirl_q;
  pauli_e             s1_inv_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid_q <= 1'b0;
      s1_phase_q <= '0;
      s1_slot_q  <= SLOT_PHI0;
      s1_twirl_q <= PAULI_I;
      s1_inv_q   <= PAULI_I;
    end else begin
      s1_valid_q <= req_valid_i;
      if (req_valid_i) begin
        s1_phase_q <= req_phase_i;
        s1_slot_q  <= req_meta_i.slot;
        s1_twirl_q <= req_meta_i.no_twirl ? PAULI_I : cur_q[QUBIT_ID];
        s1_inv_q   <= p_inv_d;
      end
    end
  end

  // ------------------------------------------ stage 2: absorb into the phase
  logic [PHASE_W-1:0] phase_d;

  phase_absorb #(.PHASE_W(PHASE_W)) u_absorb (
    .p_twirl_i (s1_twirl_q),
    .p_inv_i   (s1_inv_q),
    .slot_i    (s1_slot_q),
    .phase_i   (s1_phase_q),
    .fn_o      (),
    .phase_o   (phase_d)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      resp_valid_o <= 1'b0;
      resp_phase_o <= '0;
    end else begin
      resp_valid_o <= s1_valid_q;
      if (s1_valid_q) resp_phase_o <= phase_d;
    end
  end

  // Request rules: a two-qubit gate names another, existing qubit, and the
  // slot is one of the three U3 phases.
  assert property (@(posedge clk) disable iff (!rst_n)
                   req_valid_i && (req_meta_i.gate inside {GATE_CZ, GATE_CNOT_CTRL, GATE_CNOT_TGT})
                   |-> (32'(req_meta_i.partner) < N_QUBIT) && (32'(req_meta_i.partner) != QUBIT_ID))
    else $error("rc_module: bad partner qubit %0d", req_meta_i.partner);
  assert property (@(posedge clk) disable iff (!rst_n)
                   req_valid_i |-> req_meta_i.slot inside {SLOT_PHI0, SLOT_PHI1, SLOT_PHI2})
    else $error("rc_module: bad U3 slot");

endmodule
