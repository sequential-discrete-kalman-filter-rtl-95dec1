// sdkf_ref_pkg: binary64 reference model of one Sequential Discrete Kalman Filter step and
// the test-data generator shared by the estimator testbenches.
//
// Matrices are flat dynamic arrays, row-major: P[i*S + j], H[m*S + k]. The model follows
// the algorithm directly (prediction P := P + diag(Q), then for every measurement
// C = h P, zhat = h x, W = r + C h^T, g = (z - zhat) / W, x := x + g C, P := P - C^T C / W)
// without any of the block scheduling of the design, so the two agree only to rounding.
package sdkf_ref_pkg;
  import fp_ref_pkg::*;

  function automatic void kf_step(input int S, input int D, ref real H[], ref real R[],
                                  ref real Q[], ref real z[], ref real x[], ref real P[]);
    real C[];
    real zh, dsz, w, g;
    C = new[S];
    for (int i = 0; i < S; i++) P[i*S + i] += Q[i];
    for (int m = 0; m < D; m++) begin
      for (int j = 0; j < S; j++) begin
        C[j] = 0.0;
        for (int k = 0; k < S; k++) C[j] += H[m*S + k] * P[k*S + j];
      end
      zh  = 0.0;
      dsz = 0.0;
      for (int k = 0; k < S; k++) begin
        zh  += H[m*S + k] * x[k];
        dsz += C[k] * H[m*S + k];
      end
      w = R[m] + dsz;
      g = (z[m] - zh) / w;
      for (int j = 0; j < S; j++) x[j] += g * C[j];
      for (int i = 0; i < S; i++)
        for (int j = 0; j < S; j++) P[i*S + j] -= C[i] * C[j] / w;
    end
  endfunction

  // uniform real in [lo, hi]
  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(1000000)) / 1000000.0;
  endfunction

  // Measurement matrix: rows m < S measure one state each (like PMU voltage channels);
  // the remaining rows combine 2 or 3 random states with weights in [-2, 2] (like branch
  // currents). All entries are exact binary32 values.
  function automatic void make_h(input int S, input int D, ref real H[]);
    H = new[D*S];
    foreach (H[i]) H[i] = 0.0;
    for (int m = 0; m < D; m++) begin
      if (m < S) H[m*S + m] = 1.0;
      else begin
        int n, col;
        real v;
        n = 2 + int'($urandom_range(1));
        for (int t = 0; t < n; t++) begin
          col = int'($urandom_range(S - 1));
          v   = to_real(to_fp32(urand(-2.0, 2.0)));
          H[m*S + col] = v;
        end
      end
    end
  endfunction

  // measurements of a state near x0: z = H x_true + noise, rounded to binary32
  function automatic void make_z(input int S, input int D, ref real H[], ref real x0[],
                                 input real sigma, ref real z[]);
    real xt[];
    xt = new[S];
    z  = new[D];
    for (int k = 0; k < S; k++) xt[k] = x0[k] + urand(-0.05, 0.05);
    for (int m = 0; m < D; m++) begin
      real s;
      s = urand(-sigma, sigma);
      for (int k = 0; k < S; k++) s += H[m*S + k] * xt[k];
      z[m] = to_real(to_fp32(s));
    end
  endfunction
endpackage
