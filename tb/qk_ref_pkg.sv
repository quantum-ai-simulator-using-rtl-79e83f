// qk_ref_pkg: floating-point reference model of the block feature map and kernel, used by the testbenches.
//
// It simulates the circuit gate by gate on a 2^n state vector in double
// precision and does not share any step with the RTL. The circuit is:
// H on every qubit, then Rz(x_q), then Ry(x_q), then CNOT(1,2), CNOT(2,3), ...,
// CNOT(n-1,n) in that order, and last Rz(x_q). Qubit 1 is the most significant
// bit of the basis index.
// Conventions: Rz(t) = diag(e^{-it/2}, e^{it/2}) and
// Ry(t) = [[cos t/2, -sin t/2], [sin t/2, cos t/2]].
package qk_ref_pkg;

  localparam int MAXN = 6;
  localparam int MAXM = 1 << MAXN;

  typedef real vec_t [MAXM];

  function automatic real fx2r(input logic signed [15:0] v, input int frac);
    return real'(v) / real'(1 << frac);
  endfunction

  // 2x2 gate on qubit q (1-based), g = [g00r,g00i,g01r,g01i,g10r,g10i,g11r,g11i]
  function automatic void apply1(input int n, input int q, input real g [8],
                                 inout vec_t sr, inout vec_t si);
    int bitpos;
    bitpos = n - q;
    for (int k = 0; k < (1 << n); k++) begin
      if (((k >> bitpos) & 1) == 0) begin
        int k1;
        real ar, ai, br, bi;
        k1 = k | (1 << bitpos);
        ar = sr[k];  ai = si[k];  br = sr[k1]; bi = si[k1];
        sr[k]  = g[0]*ar - g[1]*ai + g[2]*br - g[3]*bi;
        si[k]  = g[0]*ai + g[1]*ar + g[2]*bi + g[3]*br;
        sr[k1] = g[4]*ar - g[5]*ai + g[6]*br - g[7]*bi;
        si[k1] = g[4]*ai + g[5]*ar + g[6]*bi + g[7]*br;
      end
    end
  endfunction

  function automatic void apply_cnot(input int n, input int c, input int t,
                                     inout vec_t sr, inout vec_t si);
    vec_t nr, ni;
    for (int k = 0; k < (1 << n); k++) begin
      int k2;
      k2 = k;
      if (((k >> (n - c)) & 1) == 1) k2 = k ^ (1 << (n - t));
      nr[k2] = sr[k];
      ni[k2] = si[k];
    end
    for (int k = 0; k < (1 << n); k++) begin
      sr[k] = nr[k];
      si[k] = ni[k];
    end
  endfunction

  // State |psi(x)> for n qubits; x[q-1] is the feature of qubit q (full angle).
  function automatic void feature_state(input int n, input real x [MAXN],
                                        output vec_t sr, output vec_t si);
    real h [8];
    real rz [8];
    real ry [8];
    real r2;
    r2 = 1.0 / $sqrt(2.0);
    for (int k = 0; k < MAXM; k++) begin
      sr[k] = 0.0;
      si[k] = 0.0;
    end
    sr[0] = 1.0;
    h = '{r2, 0.0, r2, 0.0, r2, 0.0, -r2, 0.0};
    for (int q = 1; q <= n; q++) begin
      real t;
      t  = x[q-1] / 2.0;
      rz = '{$cos(t), -$sin(t), 0.0, 0.0, 0.0, 0.0, $cos(t), $sin(t)};
      ry = '{$cos(t), 0.0, -$sin(t), 0.0, $sin(t), 0.0, $cos(t), 0.0};
      apply1(n, q, h, sr, si);
      apply1(n, q, rz, sr, si);
      apply1(n, q, ry, sr, si);
    end
    for (int q = 1; q < n; q++) apply_cnot(n, q, q + 1, sr, si);
    for (int q = 1; q <= n; q++) begin
      real t;
      t  = x[q-1] / 2.0;
      rz = '{$cos(t), -$sin(t), 0.0, 0.0, 0.0, 0.0, $cos(t), $sin(t)};
      apply1(n, q, rz, sr, si);
    end
  endfunction

  // K = |<a|b>|^2
  function automatic real kernel_of(input int n, input vec_t ar, input vec_t ai,
                                    input vec_t br, input vec_t bi);
    real re, im;
    re = 0.0;
    im = 0.0;
    for (int k = 0; k < (1 << n); k++) begin
      re += ar[k]*br[k] + ai[k]*bi[k];
      im += ar[k]*bi[k] - ai[k]*br[k];
    end
    return re*re + im*im;
  endfunction

  function automatic real rabs(input real a);
    return (a < 0.0) ? -a : a;
  endfunction

endpackage
