// rc_tb_pkg: reference arithmetic for the randomized-compiling testbenches.
//
// The testbenches do not reuse the design's tables. They check the
// hardware's answers with plain quantum mechanics instead: small complex
// matrices (2x2 for one qubit, 4x4 for two) built from the gate
// definitions, multiplied out, and compared up to a global phase.
//
//   cmat            complex n x n matrix (n = 2 or 4) with mul, kron, adjoint
//   same_up_to_phase(a, b)  |Tr(a^dagger b)| / n, 1.0 when a = e^{i t} b
//   pauli_m(p)      I, X, Y, Z for the codes 0..3
//   zph(phi)        virtual Z = diag(1, e^{i phi})
//   x90()           exp(-i pi X / 4)
//   u3(p2, p1, p0)  Z(p2) X90 Z(p1) X90 Z(p0)
//   cz(), cnot(c)   two-qubit gates; qubit "a" is the first tensor factor,
//                   cnot(0) has a as control, cnot(1) has b as control
//   phase_rad(ph)   32-bit fixed-point phase (full turn 2^32) to radians
package rc_tb_pkg;

  localparam real PI = 3.14159265358979323846;

  class cmat;
    int  n;
    real re[4][4];
    real im[4][4];

    function new(int size = 2);
      n = size;
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 4; c++) begin
          re[r][c] = (r == c && r < n) ? 1.0 : 0.0;
          im[r][c] = 0.0;
        end
    endfunction

    function void set(int r, int c, real vr, real vi);
      re[r][c] = vr;
      im[r][c] = vi;
    endfunction

    function cmat mul(cmat b);
      cmat m = new(n);
      for (int r = 0; r < n; r++)
        for (int c = 0; c < n; c++) begin
          real sr = 0.0, si = 0.0;
          for (int k = 0; k < n; k++) begin
            sr += re[r][k] * b.re[k][c] - im[r][k] * b.im[k][c];
            si += re[r][k] * b.im[k][c] + im[r][k] * b.re[k][c];
          end
          m.re[r][c] = sr;
          m.im[r][c] = si;
        end
      return m;
    endfunction

    function cmat adj();
      cmat m = new(n);
      for (int r = 0; r < n; r++)
        for (int c = 0; c < n; c++) begin
          m.re[r][c] = re[c][r];
          m.im[r][c] = -im[c][r];
        end
      return m;
    endfunction

    // this (x) b, both 2x2
    function cmat kron(cmat b);
      cmat m = new(4);
      for (int r1 = 0; r1 < 2; r1++)
        for (int c1 = 0; c1 < 2; c1++)
          for (int r2 = 0; r2 < 2; r2++)
            for (int c2 = 0; c2 < 2; c2++) begin
              m.re[2*r1+r2][2*c1+c2] = re[r1][c1] * b.re[r2][c2] - im[r1][c1] * b.im[r2][c2];
              m.im[2*r1+r2][2*c1+c2] = re[r1][c1] * b.im[r2][c2] + im[r1][c1] * b.re[r2][c2];
            end
      return m;
    endfunction
  endclass

  function automatic real same_up_to_phase(cmat a, cmat b);
    real tr = 0.0, ti = 0.0;
    for (int r = 0; r < a.n; r++)
      for (int k = 0; k < a.n; k++) begin
        // conj(a[k][r]) * b[k][r]
        tr += a.re[k][r] * b.re[k][r] + a.im[k][r] * b.im[k][r];
        ti += a.re[k][r] * b.im[k][r] - a.im[k][r] * b.re[k][r];
      end
    return $sqrt(tr * tr + ti * ti) / real'(a.n);
  endfunction

  function automatic cmat pauli_m(int p);
    cmat m = new(2);
    case (p)
      1: begin m.set(0, 0, 0, 0); m.set(0, 1, 1, 0);  m.set(1, 0, 1, 0); m.set(1, 1, 0, 0); end
      2: begin m.set(0, 0, 0, 0); m.set(0, 1, 0, -1); m.set(1, 0, 0, 1); m.set(1, 1, 0, 0); end
      3: begin m.set(1, 1, -1, 0); end
      default: ;
    endcase
    return m;
  endfunction

  function automatic cmat zph(real phi);
    cmat m = new(2);
    m.set(1, 1, $cos(phi), $sin(phi));
    return m;
  endfunction

  function automatic cmat x90();
    cmat m = new(2);
    real s = 1.0 / $sqrt(2.0);
    m.set(0, 0, s, 0); m.set(0, 1, 0, -s);
    m.set(1, 0, 0, -s); m.set(1, 1, s, 0);
    return m;
  endfunction

  function automatic cmat u3(real p2, real p1, real p0);
    cmat m = zph(p2);
    m = m.mul(x90());
    m = m.mul(zph(p1));
    m = m.mul(x90());
    m = m.mul(zph(p0));
    return m;
  endfunction

  function automatic cmat cz();
    cmat m = new(4);
    m.set(3, 3, -1, 0);
    return m;
  endfunction

  // ctrl_b = 0: qubit a controls b; ctrl_b = 1: qubit b controls a.
  function automatic cmat cnot(bit ctrl_b);
    cmat m = new(4);
    int i, j;
    if (!ctrl_b) begin i = 2; j = 3; end   // |10> <-> |11>
    else         begin i = 1; j = 3; end   // |01> <-> |11>
    m.set(i, i, 0, 0); m.set(j, j, 0, 0);
    m.set(i, j, 1, 0); m.set(j, i, 1, 0);
    return m;
  endfunction

  function automatic real phase_rad(logic [31:0] ph);
    return real'(ph) * 2.0 * PI / 4294967296.0;
  endfunction

endpackage
