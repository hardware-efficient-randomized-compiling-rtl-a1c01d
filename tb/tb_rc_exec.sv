// tb_rc_exec: checks the core-side RC instruction unit.
//
// A small responder in the testbench stands in for the rc_module: it
// answers every request two cycles later with a known function of the
// phase and metadata. The testbench keeps its own copy of the phase
// registers and checks:
//   * latch_rc_cycle fires rc_latch_o for exactly one cycle, in the cycle
//     the core counter equals the timestamp (future timestamps), or in the
//     first cycle after acceptance (timestamps already passed);
//   * an immediately due latch_rc_cycle occupies 3 cycles and rc_alu 6
//     cycles from acceptance to the next ready (6 ns and 12 ns at 2 ns);
//   * rc_alu sends exactly one request carrying the instruction's phase
//     and metadata, and ALU_WRITE / ALU_ADD update the destination
//     register as expected (write-back port and read port).
`timescale 1ns/1ps
module tb_rc_exec;
  import rc_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  logic [31:0] core_time;
  logic        instr_valid, instr_ready;
  rc_instr_t   instr;
  logic        rc_latch, rc_req_valid, rc_resp_valid;
  logic [31:0] rc_req_phase, rc_resp_phase;
  rc_meta_t    rc_req_meta;
  logic        wb_valid;
  logic [3:0]  wb_reg, rd_addr;
  logic [31:0] wb_data, rd_data;

  rc_exec dut (
    .clk             (clk),
    .rst_n           (rst_n),
    .core_time_i     (core_time),
    .instr_valid_i   (instr_valid),
    .instr_ready_o   (instr_ready),
    .instr_i         (instr),
    .rc_latch_o      (rc_latch),
    .rc_req_valid_o  (rc_req_valid),
    .rc_req_phase_o  (rc_req_phase),
    .rc_req_meta_o   (rc_req_meta),
    .rc_resp_valid_i (rc_resp_valid),
    .rc_resp_phase_i (rc_resp_phase),
    .wb_valid_o      (wb_valid),
    .wb_reg_o        (wb_reg),
    .wb_data_o       (wb_data),
    .rd_addr_i       (rd_addr),
    .rd_data_o       (rd_data)
  );

  initial begin
    repeat (50000) @(posedge clk);
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

  function automatic logic [31:0] resp_fn(logic [31:0] ph, rc_meta_t m);
    return ph * 32'd3 + {22'd0, m};
  endfunction

  // core counter and rc_module stand-in (two-cycle answer)
  logic        v1, v2;
  logic [31:0] r1, r2;
  int          n_req, n_latch_pulses, last_latch_time;
  logic [31:0] last_req_phase;
  rc_meta_t    last_req_meta;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      core_time <= '0;
      v1 <= 1'b0; v2 <= 1'b0; r1 <= '0; r2 <= '0;
    end else begin
      core_time <= core_time + 32'd1;
      v1 <= rc_req_valid;
      r1 <= resp_fn(rc_req_phase, rc_req_meta);
      v2 <= v1;
      r2 <= r1;
      if (rc_req_valid) begin
        n_req++;
        last_req_phase <= rc_req_phase;
        last_req_meta  <= rc_req_meta;
      end
      if (rc_latch) begin
        n_latch_pulses++;
        last_latch_time = int'(core_time);
      end
    end
  end
  assign rc_resp_valid = v2;
  assign rc_resp_phase = r2;

  logic [31:0] regs_m [16];

  // Offer one instruction when the unit is idle and return the number of
  // cycles from its acceptance until the unit can accept the next one.
  task automatic issue(rc_instr_t in, output int busy);
    while (!instr_ready) begin
      @(posedge clk);
      #0.1;
    end
    instr       = in;
    instr_valid = 1'b1;
    @(posedge clk);
    #0.1;
    instr_valid = 1'b0;
    busy = 1;
    while (!instr_ready && busy < 1000) begin
      @(posedge clk);
      #0.1;
      busy++;
    end
  endtask

  task automatic latch_at(logic [31:0] ts, int exp_busy);
    rc_instr_t in = '0;
    int        busy, pulses0;
    in.op        = OP_LATCH_RC_CYCLE;
    in.timestamp = ts;
    pulses0      = n_latch_pulses;
    issue(in, busy);
    check(n_latch_pulses == pulses0 + 1, "exactly one latch pulse");
    if (exp_busy > 0) check(busy == exp_busy, $sformatf("latch busy %0d", busy));
  endtask

  task automatic alu(logic [31:0] ph, rc_alu_op_e op, logic [3:0] rd);
    rc_instr_t in = '0;
    int        busy, req0;
    logic [31:0] res;
    in.op            = OP_RC_ALU;
    in.phase         = ph;
    in.meta.slot     = u3_slot_e'($urandom_range(2));
    in.meta.gate     = rc_gate_e'($urandom_range(4));
    in.meta.partner  = 4'($urandom);
    in.meta.no_twirl = 1'($urandom);
    in.alu_op        = op;
    in.rd            = rd;
    req0             = n_req;
    fork
      issue(in, busy);
      begin : wb_watch
        @(posedge wb_valid);
        #0.1;
        res = resp_fn(ph, in.meta);
        regs_m[rd] = (op == ALU_ADD) ? regs_m[rd] + res : res;
        check(wb_reg == rd && wb_data == regs_m[rd], "write-back value");
      end
    join
    check(busy == 6, $sformatf("rc_alu busy %0d", busy));
    check(n_req == req0 + 1, "one request per rc_alu");
    check(last_req_phase == ph && last_req_meta == in.meta, "request carries operands");
    rd_addr = rd;
    #0.1;
    check(rd_data == regs_m[rd], "register read");
  endtask

  initial begin
    int t;
    instr_valid = 1'b0;
    instr       = '0;
    rd_addr     = '0;
    n_req = 0; n_latch_pulses = 0;
    foreach (regs_m[r]) regs_m[r] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (5) @(posedge clk);
    // future timestamps: trigger exactly at the timestamp
    for (int i = 0; i < 20; i++) begin
      t = int'(core_time) + 5 + $urandom_range(30);
      latch_at(32'(t), 0);
      check(last_latch_time == t, $sformatf("latch at %0d, wanted %0d", last_latch_time, t));
    end
    // timestamps already due: 3-cycle instruction
    for (int i = 0; i < 10; i++) latch_at(core_time - 32'd4, 3);
    // rc_alu: writes and accumulations
    for (int i = 0; i < 100; i++)
      alu($urandom, rc_alu_op_e'($urandom_range(1)), 4'($urandom));
    // pulses never come without an instruction
    t = n_latch_pulses;
    repeat (50) @(posedge clk);
    check(n_latch_pulses == t, "no spurious latch pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
