// norm_limiter: decision of the heuristic weight-norm limiter,
//   limit = ( ||w[n-1]||_p^p >= rho_w ),
// after which the updated weights are halved (a shift in lin_filter) and the
// spline control points absorb the gain change through adaptation.
// NORM_P = 1 (default, the configuration evaluated in the description):
//   ||w||_1 = sum_k |w_k| = sum_k sqrt(w_I^2 + w_Q^2), one square root per tap,
//   computed with an unrolled integer square root.
// NORM_P = 2: ||w||_2^2 = sum_k |w_k|^2, no square roots.
// Works on the registered weights, so it runs in parallel with the update.
// Combinational.
module norm_limiter
  import wsaf_pkg::*;
#(
  parameter int Q_LIN  = 16,
  parameter int NORM_P = 1
)(
  input  cfx_t w [Q_LIN],
  input  fx_t  rho_w,
  output fx_t  norm,
  output logic limit
);
  always_comb begin
    logic [2*FW+1:0] mag2;
    fx_t m;
    norm = '0;
    for (int k = 0; k < Q_LIN; k++) begin
      mag2 = (2*FW+2)'(fxw_t'(w[k].re) * fxw_t'(w[k].re))
           + (2*FW+2)'(fxw_t'(w[k].im) * fxw_t'(w[k].im));
      if (NORM_P == 1) m = fx_t'(isqrt(mag2));          // Q.2F -> sqrt -> Q.F
      else             m = fx_sat(fxw_t'(mag2 >> FRAC));
      norm = fx_add(norm, m);
    end
    limit = (norm >= rho_w);
  end
endmodule
