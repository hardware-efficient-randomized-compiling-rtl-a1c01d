// tb_lfsr_prng: checks the global twirl LFSR at its default size.
//
// The 16-bit instance (8 qubits) is run for one full period. Its output is
// compared every cycle with a reference register built here from the
// polynomial x^16 + x^15 + x^13 + x^4 + 1, every one of the 65535 non-zero
// states must appear exactly once, and each qubit's 2-bit draw must show
// the exact counts of a maximal sequence (I: 16383, X/Y/Z: 16384 each).
// A second, 8-bit instance (4 qubits) must repeat after exactly 255 steps.
`timescale 1ns/1ps
module tb_lfsr_prng;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  logic [15:0] st16;
  logic [7:0]  st8;

  lfsr_prng dut16 (.clk(clk), .rst_n(rst_n), .state_o(st16));
  lfsr_prng #(.N_QUBIT(4), .SEED(32'h1)) dut8 (.clk(clk), .rst_n(rst_n), .state_o(st8));

  initial begin
    repeat (200000) @(posedge clk);
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

  bit          seen [65536];
  int          cnt  [8][4];
  logic [15:0] ref16;
  logic [7:0]  first8;
  int          dup, mism, period8;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    #0.1;
    ref16 = 16'hACE1;
    check(st16 == 16'hACE1, "16-bit seed after reset");
    dup = 0; mism = 0;
    for (int i = 0; i < 65535; i++) begin
      if (st16 != ref16) mism++;
      if (seen[st16]) dup++;
      seen[st16] = 1'b1;
      for (int q = 0; q < 8; q++) cnt[q][st16[2*q +: 2]]++;
      // reference: shift left, feed back taps 16, 15, 13, 4
      ref16 = {ref16[14:0], ref16[15] ^ ref16[14] ^ ref16[12] ^ ref16[3]};
      @(posedge clk);
      #0.1;
    end
    check(mism == 0, $sformatf("16-bit sequence differs from reference %0d times", mism));
    check(dup == 0, $sformatf("16-bit state repeated %0d times within a period", dup));
    check(!seen[0], "all-zero state reached");
    check(st16 == 16'hACE1, "16-bit period is 65535");
    for (int q = 0; q < 8; q++) begin
      check(cnt[q][0] == 16383, $sformatf("qubit %0d I count %0d", q, cnt[q][0]));
      for (int p = 1; p < 4; p++)
        check(cnt[q][p] == 16384, $sformatf("qubit %0d pauli %0d count %0d", q, p, cnt[q][p]));
    end
    // 8-bit instance: time to return to the current state
    first8 = st8;
    period8 = 0;
    do begin
      @(posedge clk);
      #0.1;
      period8++;
    end while (st8 != first8 && period8 < 1000);
    check(period8 == 255, $sformatf("8-bit period %0d", period8));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
