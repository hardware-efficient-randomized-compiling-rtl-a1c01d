// rc_top_harness: end-to-end test bench body for rc_top (default size).
//
// The harness plays the processor cores of N_QUBIT = 8 qubits, grouped in
// four pairs (0,1), (2,3), (4,5), (6,7). For every shot it draws, for each
// pair, a random circuit of D two-qubit cycles: single-qubit U3 cycles with
// random phases interleaved with two-qubit gates taken from GATE_MASK
// (bit 0 identity, bit 1 CZ, bit 2 CNOT a->b, bit 3 CNOT b->a), and a final
// single-qubit cycle. It runs the circuit as the RC-enabled program would:
//   * one latch_rc_cycle per gate cycle, issued to all eight cores with the
//     same timestamp (mostly in the future, sometimes already passed),
//   * three rc_alu per qubit per cycle, with the previous gate (NONE in the
//     first cycle), the partner qubit and no_twirl in the last cycle;
//     phi0 and phi1 are written to registers 0 and 1 (ALU_WRITE), phi2 is
//     accumulated into register 3 (ALU_ADD) and recovered as the
//     difference of successive write-backs.
// The check is physical: for every pair the 4x4 unitary of the randomized
// circuit built from the hardware's phases must equal the unitary of the
// bare circuit up to global phase. The harness also checks that all eight
// latch triggers of a cycle fire together at the timestamp, and that the
// latch_rc_cycle / rc_alu instructions take 3 / 6 cycles. It counts how
// often each mechanism happened (future and late timestamps, every gate
// code, no_twirl, write and accumulate, a U3 actually changed by RC) and
// counts a failure for each that never did. With SPC > 1 the same bare
// circuit is run for SPC shots in a row, each shot with fresh twirls, as
// in randomized compiling with one randomization per shot. When the run
// is over (or the watchdog expires) the harness raises done; the
// testbench around it prints the result and ends the simulation.
`timescale 1ns/1ps
module rc_top_harness #(
  parameter int    SHOTS     = 40,
  parameter int    SPC       = 1,        // shots per circuit
  parameter int    DMIN      = 1,
  parameter int    DMAX      = 8,
  parameter int    GATE_MASK = 4'b1111,
  parameter int    WATCHDOG  = 2000000,
  parameter string LABEL     = "rc_top"
) (
  output logic done,       // set when the run is over
  output int   checks,     // checks made
  output int   failures    // checks failed
);
  import rc_pkg::*;
  import rc_tb_pkg::*;

  localparam int NQ    = 8;
  localparam int NP    = NQ / 2;
  localparam int DLIM  = DMAX + 1;

  initial begin
    done     = 1'b0;
    checks   = 0;
    failures = 0;
  end

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  logic [31:0]     core_time;
  logic [31:0]     core_time_v [NQ];
  logic            instr_valid [NQ];
  logic            instr_ready [NQ];
  rc_instr_t       instr       [NQ];
  logic            rc_latch    [NQ];
  logic            wb_valid    [NQ];
  logic [3:0]      wb_reg      [NQ];
  logic [31:0]     wb_data     [NQ];
  logic [3:0]      rd_addr     [NQ];
  logic [31:0]     rd_data     [NQ];
  logic [2*NQ-1:0] lfsr;

  rc_top dut (
    .clk           (clk),
    .rst_n         (rst_n),
    .core_time_i   (core_time_v),
    .instr_valid_i (instr_valid),
    .instr_ready_o (instr_ready),
    .instr_i       (instr),
    .rc_latch_o    (rc_latch),
    .wb_valid_o    (wb_valid),
    .wb_reg_o      (wb_reg),
    .wb_data_o     (wb_data),
    .rd_addr_i     (rd_addr),
    .rd_data_o     (rd_data),
    .lfsr_o        (lfsr)
  );

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("%s: watchdog expired", LABEL);
    done = 1'b1;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------ shared core counter
  always_ff @(posedge clk) begin
    if (!rst_n) core_time <= '0;
    else        core_time <= core_time + 32'd1;
  end
  always_comb for (int q = 0; q < NQ; q++) core_time_v[q] = core_time;

  // ------------------------------------------------------------ monitors
  int          cur_k;                 // gate cycle being executed
  logic [31:0] hw_ph [NQ][DLIM][3];   // phases returned by the hardware
  logic [31:0] acc_prev [NQ];         // last value of register 3
  int          latch_time [NQ];
  int          n_latch [NQ];
  int          pauli_seen [4];

  always @(posedge clk) begin
    if (rst_n) begin
      for (int q = 0; q < NQ; q++) begin
        if (rc_latch[q]) begin
          latch_time[q] = int'(core_time);
          n_latch[q]++;
          if (q == 0)
            for (int j = 0; j < NQ; j++) pauli_seen[lfsr[2*j +: 2]]++;
        end
        if (wb_valid[q]) begin
          case (wb_reg[q])
            4'd0: hw_ph[q][cur_k][0] = wb_data[q];
            4'd1: hw_ph[q][cur_k][1] = wb_data[q];
            4'd3: begin
              hw_ph[q][cur_k][2] = wb_data[q] - acc_prev[q];
              acc_prev[q]        = wb_data[q];
            end
            default: ;
          endcase
        end
      end
    end
  end

  // ------------------------------------------------- mechanism counters
  int m_latch_wait, m_latch_late, m_no_twirl, m_alu_write, m_alu_add, m_randomized;
  int m_gate [5];
  int n_circuits;

  // ------------------------------------------------------------- driving
  task automatic wait_all_ready();
    bit all;
    do begin
      all = 1;
      for (int q = 0; q < NQ; q++) if (!instr_ready[q]) all = 0;
      if (!all) begin
        @(posedge clk);
        #0.1;
      end
    end while (!all);
  endtask

  // Issue one instruction per core in the same cycle; return the number of
  // cycles until all cores are ready again.
  task automatic issue_all(rc_instr_t in [NQ], output int busy);
    wait_all_ready();
    for (int q = 0; q < NQ; q++) begin
      instr[q]       = in[q];
      instr_valid[q] = 1'b1;
    end
    @(posedge clk);
    #0.1;
    for (int q = 0; q < NQ; q++) instr_valid[q] = 1'b0;
    busy = 1;
    begin
      bit all;
      do begin
        all = 1;
        for (int q = 0; q < NQ; q++) if (!instr_ready[q]) all = 0;
        if (!all) begin
          @(posedge clk);
          #0.1;
          busy++;
        end
      end while (!all && busy < 10000);
    end
  endtask

  function automatic cmat gate4(int g);
    case (g)
      1: return cz();
      2: return cnot(1'b0);
      3: return cnot(1'b1);
      default: begin
        cmat m = new(4);
        return m;
      end
    endcase
  endfunction

  logic [31:0] ph   [NQ][DLIM][3];    // bare circuit phases
  int          gsel [NP][DLIM];       // two-qubit gate after cycle k

  task automatic run_shot(int depth, bit redraw);
    rc_instr_t in [NQ];
    int        busy, t, n_l0 [NQ];
    bit        late;
    // draw the bare circuit (kept for SPC shots)
    if (redraw) begin
      for (int p = 0; p < NP; p++)
        for (int k = 0; k < depth; k++)
          do gsel[p][k] = $urandom_range(3); while (!GATE_MASK[gsel[p][k]]);
      for (int q = 0; q < NQ; q++)
        for (int k = 0; k <= depth; k++)
          for (int n = 0; n < 3; n++) ph[q][k][n] = $urandom;
    end

    for (int k = 0; k <= depth; k++) begin
      cur_k = k;
      // latch_rc_cycle on every core, common timestamp
      late = ($urandom_range(4) == 0);
      t    = late ? int'(core_time) - 3 : int'(core_time) + 4 + $urandom_range(12);
      for (int q = 0; q < NQ; q++) begin
        in[q]           = '0;
        in[q].op        = OP_LATCH_RC_CYCLE;
        in[q].timestamp = 32'(t);
        n_l0[q]         = n_latch[q];
      end
      issue_all(in, busy);
      if (late) begin
        m_latch_late++;
        check(busy == 3, $sformatf("latch_rc_cycle took %0d cycles", busy));
      end else begin
        m_latch_wait++;
      end
      for (int q = 0; q < NQ; q++) begin
        check(n_latch[q] == n_l0[q] + 1, "one trigger per core");
        check(latch_time[q] == latch_time[0], "triggers of all cores in one cycle");
      end
      if (!late) check(latch_time[0] == t, "trigger at the timestamp");

      // rc_alu for the three phases of every qubit
      for (int n = 0; n < 3; n++) begin
        for (int q = 0; q < NQ; q++) begin
          int p = q / 2;
          bit b = q % 2;
          rc_gate_e g;
          if (k == 0) g = GATE_NONE;
          else case (gsel[p][k-1])
            0: g = GATE_ID;
            1: g = GATE_CZ;
            2: g = b ? GATE_CNOT_TGT : GATE_CNOT_CTRL;
            default: g = b ? GATE_CNOT_CTRL : GATE_CNOT_TGT;
          endcase
          in[q]               = '0;
          in[q].op            = OP_RC_ALU;
          in[q].phase         = ph[q][k][n];
          in[q].meta.slot     = u3_slot_e'(n);
          in[q].meta.gate     = g;
          in[q].meta.partner  = QIDX_W'(q ^ 1);
          in[q].meta.no_twirl = (k == depth);
          in[q].alu_op        = (n == 2) ? ALU_ADD : ALU_WRITE;
          in[q].rd            = (n == 2) ? 4'd3 : 4'(n);
          if (n == 0) begin
            m_gate[int'(g)]++;
            if (k == depth) m_no_twirl++;
          end
          if (n == 2) m_alu_add++; else m_alu_write++;
        end
        issue_all(in, busy);
        check(busy == 6, $sformatf("rc_alu took %0d cycles", busy));
      end
      // the accumulator register must hold the running sum
      rd_addr[0] = 4'd3;
      #0.1;
      check(rd_data[0] == acc_prev[0], "phase accumulator register");
    end

    // compare bare and randomized circuits, pair by pair
    for (int p = 0; p < NP; p++) begin
      cmat mb = new(4), mr = new(4), ua, ub, l;
      int qa = 2 * p, qb = 2 * p + 1;
      for (int k = 0; k <= depth; k++) begin
        ua = u3(phase_rad(ph[qa][k][2]), phase_rad(ph[qa][k][1]), phase_rad(ph[qa][k][0]));
        ub = u3(phase_rad(ph[qb][k][2]), phase_rad(ph[qb][k][1]), phase_rad(ph[qb][k][0]));
        l  = ua.kron(ub);
        mb = l.mul(mb);
        ua = u3(phase_rad(hw_ph[qa][k][2]), phase_rad(hw_ph[qa][k][1]), phase_rad(hw_ph[qa][k][0]));
        ub = u3(phase_rad(hw_ph[qb][k][2]), phase_rad(hw_ph[qb][k][1]), phase_rad(hw_ph[qb][k][0]));
        l  = ua.kron(ub);
        mr = l.mul(mr);
        if (k < depth) begin
          l  = gate4(gsel[p][k]);
          mb = l.mul(mb);
          mr = l.mul(mr);
        end
        for (int n = 0; n < 3; n++) begin
          if (hw_ph[qa][k][n] != ph[qa][k][n]) m_randomized++;
          if (hw_ph[qb][k][n] != ph[qb][k][n]) m_randomized++;
        end
      end
      check(same_up_to_phase(mb, mr) > 1.0 - 1e-8,
            $sformatf("pair %0d depth %0d: randomized circuit differs from bare circuit", p, depth));
    end
  endtask

  initial begin
    int depth;
    for (int q = 0; q < NQ; q++) begin
      instr_valid[q] = 1'b0;
      instr[q]       = '0;
      rd_addr[q]     = '0;
      acc_prev[q]    = '0;
      n_latch[q]     = 0;
      latch_time[q]  = 0;
    end
    cur_k = 0;
    n_circuits = 0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (4) @(posedge clk);
    #0.1;
    for (int s = 0; s < SHOTS; s++) begin
      if (s % SPC == 0) depth = $urandom_range(DMAX, DMIN);
      run_shot(depth, (s % SPC == 0));
      if (s % SPC == SPC - 1) n_circuits++;
    end
    // every mechanism must have happened
    check(m_latch_wait > 0, "latch waiting for its timestamp never happened");
    check(m_latch_late > 0, "latch with a passed timestamp never happened");
    check(m_no_twirl > 0, "final cycle without twirl never happened");
    check(m_alu_write > 0, "ALU_WRITE never happened");
    check(m_alu_add > 0, "ALU_ADD never happened");
    check(m_randomized > 0, "no phase was ever changed by randomization");
    check(m_gate[GATE_NONE] > 0, "first cycle (NONE) never happened");
    if (GATE_MASK[0]) check(m_gate[GATE_ID] > 0, "idle gate never happened");
    if (GATE_MASK[1]) check(m_gate[GATE_CZ] > 0, "CZ never happened");
    if (GATE_MASK[3:2] != 0) begin
      check(m_gate[GATE_CNOT_CTRL] > 0, "CNOT control never happened");
      check(m_gate[GATE_CNOT_TGT] > 0, "CNOT target never happened");
    end
    for (int p = 0; p < 4; p++) check(pauli_seen[p] > 0, $sformatf("twirl %0d never drawn", p));
    $display("%s: %0d circuits x %0d shots on each of %0d qubit pairs, depth %0d..%0d",
             LABEL, n_circuits, SPC, NP, DMIN, DMAX);
    $display("%s: shots=%0d latch_wait=%0d latch_late=%0d NONE=%0d ID=%0d CZ=%0d CNOT_CTRL=%0d CNOT_TGT=%0d no_twirl=%0d write=%0d add=%0d randomized_phases=%0d twirls I/X/Y/Z=%0d/%0d/%0d/%0d",
             LABEL, SHOTS, m_latch_wait, m_latch_late, m_gate[0], m_gate[1], m_gate[2], m_gate[3],
             m_gate[4], m_no_twirl, m_alu_write, m_alu_add, m_randomized,
             pauli_seen[0], pauli_seen[1], pauli_seen[2], pauli_seen[3]);
    done = 1'b1;
  end
endmodule
