// rc_exec: core-side execution of the two RC instructions.
//
// A processor core drives one qubit. Two instructions let its program use
// the core's rc_module:
//
//   latch_rc_cycle  - timed. The unit waits until the core's timestamp
//                     counter reaches the instruction's timestamp and then
//                     raises rc_latch_o for exactly one cycle. All cores
//                     given the same timestamp trigger in the same clock
//                     cycle, so their rc_modules latch the same LFSR word.
//   rc_alu          - sends an initial virtual-Z phase and its metadata to
//                     the rc_module, waits for the modified phase, and hands
//                     it to the core ALU: ALU_WRITE stores it in register rd,
//                     ALU_ADD adds it to register rd (phase accumulator).
//
// The unit accepts one instruction at a time with a valid/ready handshake
// (instr_valid_i, instr_ready_o, instr_i) and holds a register file of NREG
// PHASE_W-bit phase registers with one read port (rd_addr_i, rd_data_o);
// every write is also shown on wb_valid_o / wb_reg_o / wb_data_o.
//
// Timing (clock period 2 ns assumed). rc_alu occupies ALU_CYCLES = 6
// cycles (12 ns) from acceptance to the next acceptance: request to the
// rc_module one cycle after acceptance, answer two cycles later, register
// write on the cycle of the answer. latch_rc_cycle occupies LATCH_CYCLES
// = 3 cycles (6 ns) when its timestamp is already due one cycle after
// acceptance (the trigger fires in that cycle), and otherwise waits for the
// timestamp first. "Due" means core_time - timestamp >= 0 as a signed
// number, so a late timestamp fires at once rather than hanging.
//
// Follows the paper: the two instructions, their operands, the timed
// active-high trigger referenced to the core counter, the result going to
// a register or a phase accumulator, and the 6 ns / 12 ns execution times.
// This design's own choices: the clock period, the handshake, the register
// file size, the late-timestamp rule and the cycle-by-cycle schedule.
module rc_exec
  import rc_pkg::*;
#(
  parameter int unsigned PHASE_W      = 32,
  parameter int unsigned TIME_W       = 32,
  parameter int unsigned NREG         = 16,
  parameter int unsigned LATCH_CYCLES = 3,
  parameter int unsigned ALU_CYCLES   = 6
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [TIME_W-1:0]    core_time_i,
  // decoded instruction from the core
  input  logic                 instr_valid_i,
  output logic                 instr_ready_o,
  input  rc_instr_t            instr_i,
  // to / from the rc_module
  output logic                 rc_latch_o,
  output logic                 rc_req_valid_o,
  output logic [PHASE_W-1:0]   rc_req_phase_o,
  output rc_meta_t             rc_req_meta_o,
  input  logic                 rc_resp_valid_i,
  input  logic [PHASE_W-1:0]   rc_resp_phase_i,
  // phase registers
  output logic                 wb_valid_o,
  output logic [REG_IDX_W-1:0] wb_reg_o,
  output logic [PHASE_W-1:0]   wb_data_o,
  input  logic [REG_IDX_W-1:0] rd_addr_i,
  output logic [PHASE_W-1:0]   rd_data_o
);

  initial begin
    assert (LATCH_CYCLES >= 3) else $error("rc_exec: LATCH_CYCLES must be >= 3");
    assert (ALU_CYCLES >= 5)   else $error("rc_exec: ALU_CYCLES must be >= 5");
    assert (PHASE_W <= 32 && TIME_W <= 32) else $error("rc_exec: field wider than 32 bits");
    assert (NREG >= 1 && NREG <= (1 << REG_IDX_W)) else $error("rc_exec: NREG out of range");
  end

  typedef enum logic [2:0] {
    ST_IDLE,
    ST_LATCH_WAIT,   // waiting for the timestamp
    ST_LATCH_TAIL,   // trigger sent, finishing the instruction
    ST_ALU_REQ,      // request to the rc_module
    ST_ALU_BUSY      // waiting for the answer / finishing
  } state_e;

  state_e               state_q;
  logic [7:0]           cnt_q;
  logic [TIME_W-1:0]    ts_q;
  logic [PHASE_W-1:0]   phase_q;
  rc_meta_t             meta_q;
  rc_alu_op_e           alu_op_q;
  logic [REG_IDX_W-1:0] rd_q;
  logic                 resp_seen_q;   // answer received for this rc_alu

  logic [PHASE_W-1:0]   regs_q [NREG];

  logic [TIME_W-1:0]    time_diff;
  logic                 due;

  assign time_diff     = core_time_i - ts_q;
  assign due           = ~time_diff[TIME_W-1];
  assign instr_ready_o = (state_q == ST_IDLE);
  assign rc_latch_o    = (state_q == ST_LATCH_WAIT) && due;

  assign rc_req_valid_o = (state_q == ST_ALU_REQ);
  assign rc_req_phase_o = phase_q;
  assign rc_req_meta_o  = meta_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q  <= ST_IDLE;
      cnt_q    <= '0;
      ts_q     <= '0;
      phase_q  <= '0;
      meta_q   <= '0;
      alu_op_q <= ALU_WRITE;
      rd_q     <= '0;
    end else begin
      unique case (state_q)
        ST_IDLE: begin
          if (instr_valid_i) begin
            ts_q     <= instr_i.timestamp[TIME_W-1:0];
            phase_q  <= instr_i.phase[PHASE_W-1:0];
            meta_q   <= instr_i.meta;
            alu_op_q <= instr_i.alu_op;
            rd_q     <= instr_i.rd;
            if (instr_i.op == OP_LATCH_RC_CYCLE) begin
              state_q <= ST_LATCH_WAIT;
            end else begin
              state_q <= ST_ALU_REQ;
              cnt_q   <= 8'(ALU_CYCLES - 1);
            end
          end
        end
        ST_LATCH_WAIT: begin
          if (due) begin
            state_q <= ST_LATCH_TAIL;
            cnt_q   <= 8'(LATCH_CYCLES - 2);
          end
        end
        ST_LATCH_TAIL: begin
          cnt_q <= cnt_q - 8'd1;
          if (cnt_q <= 8'd1) state_q <= ST_IDLE;
        end
        ST_ALU_REQ: begin
          cnt_q   <= cnt_q - 8'd1;
          state_q <= ST_ALU_BUSY;
        end
        default: begin  // ST_ALU_BUSY
          cnt_q <= cnt_q - 8'd1;
          if (cnt_q <= 8'd1) state_q <= ST_IDLE;
        end
      endcase
    end
  end

  // Register file and write-back: the answer of the rc_module is written
  // in the cycle it arrives.
  logic [PHASE_W-1:0] alu_result;
  assign alu_result = (alu_op_q == ALU_ADD) ? regs_q[rd_q] + rc_resp_phase_i
                                            : rc_resp_phase_i;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int r = 0; r < NREG; r++) regs_q[r] <= '0;
      wb_valid_o  <= 1'b0;
      wb_reg_o    <= '0;
      wb_data_o   <= '0;
      resp_seen_q <= 1'b0;
    end else begin
      wb_valid_o <= 1'b0;
      if (state_q == ST_ALU_REQ) resp_seen_q <= 1'b0;
      if (state_q == ST_ALU_BUSY && rc_resp_valid_i) begin
        resp_seen_q  <= 1'b1;
        regs_q[rd_q] <= alu_result;
        wb_valid_o   <= 1'b1;
        wb_reg_o     <= rd_q;
        wb_data_o    <= alu_result;
      end
    end
  end

  assign rd_data_o = regs_q[rd_addr_i];

  // The rc_module must answer before the instruction slot ends.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state_q == ST_ALU_BUSY && cnt_q == 8'd1) |-> resp_seen_q || rc_resp_valid_i)
    else $error("rc_exec: rc_module answer missing");

endmodule
