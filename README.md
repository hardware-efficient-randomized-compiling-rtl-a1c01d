# Gateware randomized compiling

Randomized compiling (RC) turns the coherent errors of a quantum circuit into
stochastic Pauli noise. Before every cycle of two-qubit gates, a random Pauli
is applied to each qubit (the *twirl*). After the gates, the Pauli that undoes
it is applied. Both Paulis are merged into the single-qubit gates next to
them, so the circuit does the same thing but its errors are averaged over many
random versions. Done in software, every random version has to be compiled and
uploaded separately. That makes "one random version per shot" far too slow.

This RTL does the randomization on the FPGA that controls the qubits, while
the circuit runs. A global LFSR supplies the random Paulis. A small per-qubit
unit, `rc_module`, works out the inverse Paulis after CZ or CNOT gates and
rewrites each virtual-Z phase of the single-qubit gates. The program is
compiled once, yet every shot runs with a fresh randomization.

The design follows the gateware RC scheme published for the QubiC
distributed-processor qubit controller. That scheme adds two instructions to
each processor core: `latch_rc_cycle` and `rc_alu`. The QubiC cores
themselves, their pulse generators and measurement chain are not part of this
RTL. The RC-specific part of a core is modelled by `rc_exec`, and the rest of
the core's interface is brought out as ports of `rc_top`.

## The trick: Paulis become phase flips

Every single-qubit gate is expected in the form

    U3 = Z(phi2) · X90 · Z(phi1) · X90 · Z(phi0)

Here `Z(phi) = diag(1, e^{i phi})` is a *virtual* Z gate: a change of the
phase reference of later pulses, which costs no time. `X90` is a physical
pi/2 pulse. In gate cycle i, the randomized circuit must run
`P_i · U3 · P'_{i-1}` instead of `U3`:

* `P_i` is this cycle's twirl, placed just before the next two-qubit gate.
* `P'_{i-1}` is the Pauli that undoes the previous cycle's twirl, placed just
  after the previous two-qubit gate.

X, Y and Z all commute or anticommute with `X90` and `Z(phi)`. Pushing them
through the product therefore only changes the three phases, each into one of
`phi`, `-phi`, `pi - phi` or `pi + phi`. The choice depends on `P_i`, on
`P'_{i-1}` and on which of the three phases it is: a 4 x 4 x 3 table. That
table is the core of the design. It lives in `rtl/phase_absorb.sv`. Each entry
lists the functions for (phi2, phi1, phi0):

| `P_i` \ `P'_{i-1}` | I | X | Y | Z |
|---|---|---|---|---|
| **I** | (id, id, id) | (id, pi+, pi-) | (id, pi+, neg) | (id, id, pi+) |
| **X** | (neg, pi-, pi+) | (neg, neg, neg) | (neg, neg, pi-) | (neg, pi-, id) |
| **Y** | (neg, pi+, id) | (neg, id, pi-) | (neg, id, neg) | (neg, pi+, pi+) |
| **Z** | (id, neg, pi+) | (id, pi-, neg) | (id, pi-, pi-) | (id, neg, id) |

`id` = phi, `neg` = -phi, `pi-` = pi - phi, `pi+` = pi + phi.

The entries come from multiplying out the 2 x 2 matrices. Where more than one
choice works, one was picked. The result is exact up to a global phase, and
it does not change if the sign convention of `Z(phi)` is flipped. Phases are
unsigned fixed point, with one full turn equal to 2^`PHASE_W`. So pi is
`1 << (PHASE_W-1)` and each function is a single add or subtract that wraps
modulo 2 pi by itself.

## Undoing the twirl across a two-qubit gate

If `P = P_a ⊗ P_b` sits before a Clifford gate `G`, then `G P G†` is again a
two-qubit Pauli, and applying it after the gate cancels the twirl. For a fixed
gate this is a 16-entry table. `rtl/pauli_inv_lut.sv` writes it in closed form
on the symplectic bits (x = "has an X part", z = "has a Z part"). It returns
only the half that belongs to its own qubit:

| gate code (this qubit's view) | x' | z' |
|---|---|---|
| `GATE_NONE` (first cycle, nothing to undo) | 0 | 0 |
| `GATE_ID` (qubit was idle) | x_s | z_s |
| `GATE_CZ` | x_s | z_s ^ x_p |
| `GATE_CNOT_CTRL` (this qubit is the control) | x_s | z_s ^ z_p |
| `GATE_CNOT_TGT` (this qubit is the target) | x_s ^ x_p | z_s |

Here `s` is this qubit's twirl and `p` is its partner's, both from the
*previous* cycle. Signs are dropped, since a global phase does not matter. So
each qubit must know its partner's twirl. This is why the random word is
global and every `rc_module` stores all of it.

## One randomized gate cycle, step by step

A program that uses RC runs, for every gate cycle of the circuit:

1. **`latch_rc_cycle T`**, on every core that takes part, all with the same
   timestamp `T`. When the core counter reaches `T`, `rc_exec` pulses
   `rc_latch_o` for one clock. The `rc_module` then copies its current twirl
   word to *previous* and stores the LFSR's present output as the new
   *current* word. Every core fires in the same clock cycle, so all modules
   store the same word. The LFSR steps every clock, so the value depends on
   that exact cycle.
2. **`rc_alu`**, once per virtual-Z phase of the qubit's U3 (three times).
   Each carries the original phase and a 10-bit metadata field
   (`rc_pkg::rc_meta_t`):
   * `slot`: which of phi0, phi1, phi2 it is;
   * `gate`: the previous two-qubit gate and this qubit's role in it;
   * `partner`: the qubit index of the other qubit in that gate;
   * `no_twirl`: set in the last cycle of a circuit, which has no two-qubit
     gate after it to twirl.

   `rc_module` finds `P'_{i-1}` from the stored previous word, takes
   `P_i` from the current word (or I), and returns the rewritten phase. The
   core ALU then writes that phase to a register (`ALU_WRITE`) or adds it to
   one, as a phase accumulator (`ALU_ADD`).
3. The physical pulses of the U3 and the two-qubit gate, untouched by RC.

In the first cycle of a circuit the gate code is `GATE_NONE`, because there is
no earlier twirl to undo.

## Blocks

| file | block | what it does |
|---|---|---|
| `rc_pkg.sv` | package | Pauli, gate, slot and function codes; `rc_meta_t`; `rc_instr_t` |
| `lfsr_prng.sv` | global PRNG | 2·N_QUBIT-bit Fibonacci LFSR, steps every clock; bits `[2q+1:2q]` are qubit q's Pauli (I, X, Y, Z = 0..3) |
| `pauli_inv_lut.sv` | inversion table | the table above, combinational |
| `phase_absorb.sv` | absorption map | the 4 x 4 x 3 map and the phase arithmetic, combinational |
| `rc_module.sv` | per-qubit RC unit | current/previous twirl words, 2-stage pipeline: stage 1 resolves `P_i` and `P'_{i-1}`, stage 2 rewrites the phase |
| `rc_exec.sv` | core-side RC instruction unit | timed `latch_rc_cycle`, `rc_alu` with write/accumulate into a 16 x 32-bit phase register file |
| `rc_top.sv` | top | one `lfsr_prng`, N_QUBIT pairs of `rc_exec` + `rc_module` |

### The LFSR

The LFSR has `WIDTH = 2·N_QUBIT` bits (16 at the default of 8 qubits). Its
maximal-length taps are tabulated in the module for every even width from 2
to 32: for 16 bits, x^16 + x^15 + x^13 + x^4 + 1. The all-zero word never
occurs. So the all-identity twirl across *all* qubits is one state short of
uniform: over a full period, each qubit sees I 16383 times and X, Y and Z
16384 times each. The reset value is `SEED` (0xACE1).

### rc_module timing

A request in cycle t is answered in cycle t+2, and one request can be issued
per cycle. A request in the same cycle as a latch still sees the twirls from
before the latch. Reset sets both twirl words to all-I. Simulation
assertions reject a request whose CZ or CNOT names itself or a qubit
that does not exist as its partner, and a slot code other than the three
U3 phases.

### rc_exec timing

The published execution times are 6 ns for `latch_rc_cycle` and 12 ns for
`rc_alu`. At an assumed 2 ns clock, that is 3 and 6 cycles, counted from the
cycle an instruction is accepted (`instr_valid_i && instr_ready_o`) to the
first cycle the unit is ready again.

* **`rc_alu`**: request one cycle after acceptance, answer two cycles
  later, register write in the cycle of the answer (visible on `wb_*` one
  cycle later).
* **`latch_rc_cycle`**: the trigger fires in the first cycle in which
  `core_time - T >= 0` (as a signed number). A timestamp already in the past
  therefore fires one cycle after acceptance and the instruction takes 3
  cycles. A future one holds the unit until `T`.

The 6 + 12 ns are meant to hide under a pulse. An `rc_alu` can run while the
X90 pulse before it plays, so RC adds no time as long as pulses are longer than
about 18 ns. This RTL leaves that overlap to the core's scheduler, which is not
included.

### rc_top ports

All per-qubit ports are unpacked arrays of size `N_QUBIT`:

* `core_time_i[q]`: core q's timestamp counter.
* `instr_valid_i / instr_ready_o / instr_i[q]`: decoded RC instructions, as
  `rc_instr_t` with fields `op`, `timestamp`, `phase`, `meta`, `alu_op` and
  `rd`.
* `rc_latch_o[q]`: the latch triggers.
* `wb_valid_o / wb_reg_o / wb_data_o[q]`: phase register writes.
* `rd_addr_i / rd_data_o[q]`: a read port on the phase registers.
* `lfsr_o`: the current LFSR word.

Clock and a synchronous active-low reset are shared.

## Parameters

| parameter | default | where | meaning |
|---|---|---|---|
| `N_QUBIT` | 8 | `rc_top`, `rc_module`, `lfsr_prng` | qubits (1..16); 8 is the widest circuit of the published timing study |
| `PHASE_W` | 32 | `rc_top`, `rc_module`, `phase_absorb`, `rc_exec` | phase width, full turn = 2^PHASE_W (at most 32, the instruction field) |
| `TIME_W` | 32 | `rc_top`, `rc_exec` | timestamp width |
| `NREG` | 16 | `rc_exec` | phase registers per core |
| `LATCH_CYCLES`, `ALU_CYCLES` | 3, 6 | `rc_exec` | instruction occupancy (6 ns, 12 ns at 2 ns) |
| `SEED` | 0xACE1 | `lfsr_prng` | LFSR reset value |

## What is the published scheme and what is this design's own

Taken from the published scheme:

* the global 2-bit-per-qubit LFSR drawing every clock;
* one `rc_module` per qubit that latches the whole word and keeps the
  previous one;
* the 16-entry propagation table for CZ, CNOT and identity;
* the U3 decomposition and the 64-entry map onto phi, -phi, pi-phi and pi+phi;
* the two instructions with their operands (phase, previous gate, qubit
  pair, slot);
* the timestamped trigger;
* the write/accumulate use of the result;
* the 6 ns and 12 ns execution times.

Chosen here, because the published description leaves them open:

* the numeric encodings of the Paulis (I, X, Y, Z = 0..3), gates and slots;
* the split of CNOT into control and target codes;
* `GATE_NONE` for the first cycle and the `no_twirl` flag for the last;
* the actual map entries where several are valid;
* the LFSR polynomial, seed and Fibonacci form;
* the fixed-point phase format and widths;
* the 2 ns clock;
* `rc_module`'s two-cycle pipeline;
* the valid/ready interface of `rc_exec`, its 16-register file and its
  late-timestamp rule;
* the 16-qubit ceiling of the 4-bit partner field.

Known limits and departures:

* Only CZ and CNOT (either direction) are supported as two-qubit gates.
  Adding another Clifford means adding a row to `pauli_inv_lut` and a gate
  code; the published scheme leaves the table open to "the Clifford gates
  used in the circuit".
* The program-level side is not here: the compiler passes that insert
  `latch_rc_cycle` and turn virtual-Z gates into `rc_alu`, the QubiC
  instruction encoding, and the core's fetch/decode and pulse scheduler.
  `rc_exec` accepts already-decoded instructions.
* The twirl is not perfectly uniform across all qubits jointly (see the
  LFSR section above).

## Verification

Each block has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. None of them
reuses the design's tables. Instead they check with 2 x 2 and 4 x 4 complex
matrices (`tb/rc_tb_pkg.sv`) that the rewritten gates are the right ones up to
global phase.

| testbench | checks |
|---|---|
| `tb_lfsr_prng` | a full 65535-step period against a reference model of the polynomial, every non-zero state exactly once, per-qubit Pauli counts; 255-step period of an 8-bit instance |
| `tb_pauli_inv_lut` | `G (P_s ⊗ P_p) G†` against `p_inv ⊗ Q` for all gates and twirls |
| `tb_phase_absorb` | `P U3(phi) P'` against `U3(phi')` for all 16 Pauli pairs and random phases, plus exact fixed-point values |
| `tb_rc_module` | random latches and U3 requests on qubit 3 of 8, all gate codes, `no_twirl`, two-cycle latency, latch and request in the same cycle |
| `tb_rc_exec` | trigger exactly at the timestamp (single pulse), late timestamps, 3 / 6 cycle occupancy, write and accumulate, read port |
| `tb_rc_top` | end to end at the default size, see below |

`tb_rc_top` (through `tb/rc_top_harness.sv`) runs `rc_top` with all
parameters at their defaults and acts as eight cores, in four qubit pairs.
Each shot is a random circuit of single-qubit U3 cycles and CZ / CNOT / idle
cycles, run with the full instruction sequence. For each pair it multiplies
out the 4 x 4 unitary of the randomized circuit from the phases the hardware
returned and compares it with the bare circuit. It also checks that all eight
triggers fire together at the timestamp, and it counts each mechanism (waiting
and late triggers, every gate code, `no_twirl`, write, accumulate, phases
actually changed by RC). A mechanism that never happened counts as a failure.

Three more testbenches use the same harness on the kinds of experiment the
scheme was evaluated with:

| testbench | workload | run time |
|---|---|---|
| `tb_rc_workload_profile` | depth-100 random circuits, 1000 shots each, one randomization per shot | about 20 s |
| `tb_rc_workload_cb` | cycle benchmarking of CZ: 7 circuits per qubit pair (28 in all) x 1000 shots, depth 2-8 | about 6 s |
| `tb_rc_workload_observables` | 400 random two-qubit circuits x 1000 shots, depth 1-10 | about 2 min |

The published experiments do not state the depths for the last two; the ones
above were chosen here. Every shot of every workload is checked against its
bare circuit.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        rtl/rc_pkg.sv tb/rc_tb_pkg.sv tb/tb_rc_top.sv --top-module tb_rc_top
    ./obj_dir/Vtb_rc_top

Replace `tb_rc_top` with any other testbench name. To lint the synthesizable
code:

    verilator --lint-only -Wall -Irtl -y rtl rtl/rc_pkg.sv rtl/rc_top.sv --top-module rc_top

## Size

At the default size (8 qubits), `rc_top` synthesizes to about 1.1 k
word-level cells, 1.6 k flip-flop bits and 5 k memory bits. Most of the
memory bits are the eight 16 x 32-bit phase register files, which belong to
the modelled cores rather than to RC itself. Each `rc_module` holds 32 bits
of twirl state (current and previous word) and a two-stage pipeline about
40 bits wide. Its logic is an N_QUBIT-to-1 selection of the partner's twirl,
the two table lookups and one 32-bit add or subtract.
