// rc_top: gateware randomized-compiling subsystem for N_QUBIT qubits.
//
// One global LFSR (lfsr_prng, 2 bits per qubit) feeds N_QUBIT rc_modules,
// one per qubit. Each rc_module is driven by the RC execution unit
// (rc_exec) of its qubit's processor core:
//
//   core q --instr--> rc_exec[q] --latch / rc_alu req--> rc_module[q]
//                          ^                                  |
//                          +----------- modified phase -------+
//   lfsr_prng ----------- 2*N_QUBIT-bit word --------> every rc_module
//
// A latch_rc_cycle instruction with timestamp T, issued to every core
// taking part in a gate cycle, fires all their triggers in the clock cycle
// in which the cores' counters read T, so they store the same LFSR word as
// the new twirls. rc_alu instructions then turn each virtual-Z phase of the
// cycle's single-qubit gates into the randomized phase and write it, or add
// it, into the core's phase registers.
//
// The processor cores themselves (program memory, decoder, pulse
// generators, measurement) are not part of this block: each core's
// timestamp counter and decoded RC instructions come in as ports, and its
// phase registers go out through a write-back and a read port.
//
// Interface, per qubit q: core_time_i[q], instr_valid_i[q] /
// instr_ready_o[q] / instr_i[q], rc_latch_o[q], wb_valid_o[q] / wb_reg_o[q]
// / wb_data_o[q], rd_addr_i[q] / rd_data_o[q]; and lfsr_o, the current LFSR
// word. Timing is that of rc_exec: latch_rc_cycle 3 cycles, rc_alu 6
// cycles (6 ns and 12 ns at an assumed 500 MHz clock).
//
// Follows the paper: the global PRNG / per-qubit rc_module split of its
// block diagram and the two RC instructions. This design's own choice:
// modelling only the RC part of each core.
module rc_top
  import rc_pkg::*;
#(
  parameter int unsigned N_QUBIT = 8,
  parameter int unsigned PHASE_W = 32,
  parameter int unsigned TIME_W  = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [TIME_W-1:0]    core_time_i   [N_QUBIT],
  input  logic                 instr_valid_i [N_QUBIT],
  output logic                 instr_ready_o [N_QUBIT],
  input  rc_instr_t            instr_i       [N_QUBIT],
  output logic                 rc_latch_o    [N_QUBIT],
  output logic                 wb_valid_o    [N_QUBIT],
  output logic [REG_IDX_W-1:0] wb_reg_o      [N_QUBIT],
  output logic [PHASE_W-1:0]   wb_data_o     [N_QUBIT],
  input  logic [REG_IDX_W-1:0] rd_addr_i     [N_QUBIT],
  output logic [PHASE_W-1:0]   rd_data_o     [N_QUBIT],
  output logic [2*N_QUBIT-1:0] lfsr_o
);

  logic [2*N_QUBIT-1:0] lfsr_word;

  lfsr_prng #(.N_QUBIT(N_QUBIT)) u_lfsr (
    .clk     (clk),
    .rst_n   (rst_n),
    .state_o (lfsr_word)
  );

  assign lfsr_o = lfsr_word;

  for (genvar q = 0; q < N_QUBIT; q++) begin : g_qubit
    logic               latch;
    logic               req_valid;
    logic [PHASE_W-1:0] req_phase;
    rc_meta_t           req_meta;
    logic               resp_valid;
    logic [PHASE_W-1:0] resp_phase;

    rc_exec #(.PHASE_W(PHASE_W), .TIME_W(TIME_W)) u_exec (
      .clk             (clk),
      .rst_n           (rst_n),
      .core_time_i     (core_time_i[q]),
      .instr_valid_i   (instr_valid_i[q]),
      .instr_ready_o   (instr_ready_o[q]),
      .instr_i         (instr_i[q]),
      .rc_latch_o      (latch),
      .rc_req_valid_o  (req_valid),
      .rc_req_phase_o  (req_phase),
      .rc_req_meta_o   (req_meta),
      .rc_resp_valid_i (resp_valid),
      .rc_resp_phase_i (resp_phase),
      .wb_valid_o      (wb_valid_o[q]),
      .wb_reg_o        (wb_reg_o[q]),
      .wb_data_o       (wb_data_o[q]),
      .rd_addr_i       (rd_addr_i[q]),
      .rd_data_o       (rd_data_o[q])
    );

    rc_module #(.N_QUBIT(N_QUBIT), .QUBIT_ID(q), .PHASE_W(PHASE_W)) u_rc (
      .clk          (clk),
      .rst_n        (rst_n),
      .lfsr_i       (lfsr_word),
      .latch_i      (latch),
      .req_valid_i  (req_valid),
      .req_phase_i  (req_phase),
      .req_meta_i   (req_meta),
      .resp_valid_o (resp_valid),
      .resp_phase_o (resp_phase)
    );

    assign rc_latch_o[q] = latch;
  end

endmodule
