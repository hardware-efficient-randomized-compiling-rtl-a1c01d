// lfsr_prng: global pseudorandom source for twirling-gate selection.
//
// A Fibonacci linear feedback shift register of WIDTH = 2*N_QUBIT bits that
// steps on every clock cycle. Bits [2q+1:2q] of the state are the Pauli
// (I, X, Y, Z = 0..3) that qubit q draws when its rc_module is triggered.
// Because one register serves every qubit, all rc_modules that latch in the
// same cycle see the same word, so both qubits of a two-qubit gate know each
// other's twirl.
//
// Each step shifts the state left by one and feeds in the XOR of the tap
// bits. The taps are maximal-length polynomials for every even width from 2
// to 32, so the state visits all 2^WIDTH - 1 non-zero values before
// repeating; the all-zero word never occurs.
//
// Interface: clk, rst_n (synchronous, active low, loads SEED), state_o (the
// current state, registered). Timing: a new word every cycle.
//
// Follows the paper: a 2 x N_qubit-bit LFSR, global to all qubits, drawing a
// new number every FPGA clock cycle. This design's own choices: the
// polynomials, the Fibonacci form, the seed and the reset.
module lfsr_prng #(
  parameter int unsigned    N_QUBIT = 8,
  parameter int unsigned    WIDTH   = 2 * N_QUBIT,
  parameter logic [31:0]    SEED    = 32'h0000_ACE1
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic [WIDTH-1:0] state_o
);

  // Tap mask (bit i set = stage i+1 is tapped) of a maximal-length
  // polynomial for each even width.
  function automatic logic [31:0] tap_mask(int unsigned w);
    unique case (w)
      2:       return 32'h0000_0003;  // 2,1
      4:       return 32'h0000_000C;  // 4,3
      6:       return 32'h0000_0030;  // 6,5
      8:       return 32'h0000_00B8;  // 8,6,5,4
      10:      return 32'h0000_0240;  // 10,7
      12:      return 32'h0000_0829;  // 12,6,4,1
      14:      return 32'h0000_2015;  // 14,5,3,1
      16:      return 32'h0000_D008;  // 16,15,13,4
      18:      return 32'h0002_0400;  // 18,11
      20:      return 32'h0009_0000;  // 20,17
      22:      return 32'h0030_0000;  // 22,21
      24:      return 32'h00E1_0000;  // 24,23,22,17
      26:      return 32'h0200_0023;  // 26,6,2,1
      28:      return 32'h0900_0000;  // 28,25
      30:      return 32'h2000_0029;  // 30,6,4,1
      default: return 32'h8020_0003;  // 32,22,2,1
    endcase
  endfunction

  localparam logic [31:0]      TAPS32 = tap_mask(WIDTH);
  localparam logic [WIDTH-1:0] TAPS   = TAPS32[WIDTH-1:0];
  // A zero seed would lock the register; fall back to 1.
  localparam logic [WIDTH-1:0] SEED_W = (SEED[WIDTH-1:0] == '0) ? WIDTH'(1) : SEED[WIDTH-1:0];

  initial begin
    assert (WIDTH >= 2 && WIDTH <= 32 && WIDTH % 2 == 0)
      else $error("lfsr_prng: WIDTH must be even and in 2..32");
  end

  logic [WIDTH-1:0] state_q;

  always_ff @(posedge clk) begin
    if (!rst_n) state_q <= SEED_W;
    else        state_q <= {state_q[WIDTH-2:0], ^(state_q & TAPS)};
  end

  assign state_o = state_q;

endmodule
