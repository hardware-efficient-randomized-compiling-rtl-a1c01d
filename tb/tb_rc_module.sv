// tb_rc_module: checks one per-qubit RC unit (qubit 3 of 8).
//
// The testbench plays the LFSR (random words) and the core. After each
// latch pulse it issues the three rc_alu requests of one U3, back to back,
// with random phases, a random previous gate, partner and no_twirl flag.
// Expected behaviour is worked out independently:
//   * the twirls are the words the testbench itself latched,
//   * P'_{i-1} is found by forming G (P_self (x) P_partner) G^dagger as a
//     4x4 matrix and matching it against Q (x) R for all Paulis Q, R,
//   * the answer is right if U3(phi') equals P_i U3(phi) P'_{i-1} up to
//     global phase.
// Each answer must arrive exactly two cycles after its request. One
// request issued in the same cycle as a latch must still see the old
// twirls (the latch is raised with the third request of a U3).
`timescale 1ns/1ps
module tb_rc_module;
  import rc_pkg::*;
  import rc_tb_pkg::*;

  localparam int NQ   = 8;
  localparam int SELF = 3;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  logic [2*NQ-1:0] lfsr;
  logic            latch;
  logic            req_valid;
  logic [31:0]     req_phase;
  rc_meta_t        req_meta;
  logic            resp_valid;
  logic [31:0]     resp_phase;

  rc_module #(.N_QUBIT(NQ), .QUBIT_ID(SELF), .PHASE_W(32)) dut (
    .clk          (clk),
    .rst_n        (rst_n),
    .lfsr_i       (lfsr),
    .latch_i      (latch),
    .req_valid_i  (req_valid),
    .req_phase_i  (req_phase),
    .req_meta_i   (req_meta),
    .resp_valid_o (resp_valid),
    .resp_phase_o (resp_phase)
  );

  initial begin
    repeat (100000) @(posedge clk);
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
      GATE_CNOT_CTRL: return cnot(1'b0);
      GATE_CNOT_TGT:  return cnot(1'b1);
      default: begin
        cmat m = new(4);
        return m;
      end
    endcase
  endfunction

  // This qubit's part of G (Ps (x) Pp) G^dagger, found by matrix search.
  function automatic int inv_ref(rc_gate_e g, int ps, int pp);
    cmat gm, m, cand;
    if (g == GATE_NONE) return 0;
    gm = gate_m(g);
    m  = pauli_m(ps);
    m  = m.kron(pauli_m(pp));
    m  = gm.mul(m);
    m  = m.mul(gm.adj());
    for (int q = 0; q < 4; q++)
      for (int r = 0; r < 4; r++) begin
        cand = pauli_m(q);
        cand = cand.kron(pauli_m(r));
        if (same_up_to_phase(m, cand) > 1.0 - 1e-9) return q;
      end
    return -1;
  endfunction

  int cur_m [NQ];
  int prev_m [NQ];

  task automatic do_latch(logic [2*NQ-1:0] word);
    lfsr  <= word;
    latch <= 1'b1;
    @(posedge clk);
    latch <= 1'b0;
    for (int q = 0; q < NQ; q++) begin
      prev_m[q] = cur_m[q];
      cur_m[q]  = int'(word[2*q +: 2]);
    end
  endtask

  // Issue the three phases of one U3 on consecutive cycles and check them.
  task automatic run_u3(rc_gate_e g, int partner, bit no_tw, bit with_latch,
                        logic [2*NQ-1:0] word);
    logic [31:0] ph [3], phn [3];
    int          lat [3];
    int          got, cyc;
    int          pt, pinv;
    cmat         lhs, rhs;
    for (int n = 0; n < 3; n++) ph[n] = $urandom;
    pt   = no_tw ? 0 : cur_m[SELF];
    pinv = inv_ref(g, prev_m[SELF], prev_m[partner]);
    got = 0;
    cyc = 0;
    fork
      begin
        for (int n = 0; n < 3; n++) begin
          req_valid <= 1'b1;
          req_phase <= ph[n];
          req_meta  <= '{slot: u3_slot_e'(n), gate: g, partner: QIDX_W'(partner),
                         no_twirl: no_tw};
          latch     <= with_latch && (n == 2);
          if (with_latch) lfsr <= word;
          @(posedge clk);
        end
        req_valid <= 1'b0;
        latch     <= 1'b0;
      end
      begin
        while (got < 3 && cyc < 20) begin
          @(posedge clk);
          #0.1;
          cyc++;
          if (resp_valid) begin
            phn[got] = resp_phase;
            lat[got] = cyc - got;
            got++;
          end
        end
      end
    join
    if (with_latch)
      for (int q = 0; q < NQ; q++) begin
        prev_m[q] = cur_m[q];
        cur_m[q]  = int'(word[2*q +: 2]);
      end
    check(got == 3, "three answers");
    for (int n = 0; n < 3; n++) check(lat[n] == 2, $sformatf("latency %0d", lat[n]));
    lhs = pauli_m(pt);
    lhs = lhs.mul(u3(phase_rad(ph[2]), phase_rad(ph[1]), phase_rad(ph[0])));
    lhs = lhs.mul(pauli_m(pinv));
    rhs = u3(phase_rad(phn[2]), phase_rad(phn[1]), phase_rad(phn[0]));
    check(same_up_to_phase(lhs, rhs) > 1.0 - 1e-9,
          $sformatf("gate %s P=%0d P'=%0d no_twirl=%0d latch=%0d", g.name(), pt, pinv, no_tw, with_latch));
  endtask

  initial begin
    rc_gate_e gates [5] = '{GATE_NONE, GATE_ID, GATE_CZ, GATE_CNOT_CTRL, GATE_CNOT_TGT};
    int       partner;
    lfsr      = '0;
    latch     = 1'b0;
    req_valid = 1'b0;
    req_phase = '0;
    req_meta  = '0;
    for (int q = 0; q < NQ; q++) begin cur_m[q] = 0; prev_m[q] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // after reset every twirl is I: the phase must come back unchanged
    run_u3(GATE_ID, 0, 1'b0, 1'b0, '0);
    for (int it = 0; it < 400; it++) begin
      do_latch(16'($urandom));
      @(posedge clk);
      do partner = $urandom_range(NQ - 1); while (partner == SELF);
      run_u3(gates[$urandom_range(4)], partner, ($urandom_range(7) == 0), 1'b0, '0);
      @(posedge clk);
    end
    // a request in the same cycle as a latch uses the old twirls
    // (the latch comes with the last of the three requests)
    for (int it = 0; it < 30; it++) begin
      do_latch(16'($urandom));
      @(posedge clk);
      run_u3(gates[2 + it % 3], 5, 1'b0, 1'b1, 16'($urandom));
      @(posedge clk);
      run_u3(gates[2 + it % 3], 5, 1'b0, 1'b0, '0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
