// norm_sgd: normalised stochastic-gradient update of the CIO-WSAF.
//
// All inputs except e belong to sample n-k_g (they were stored when the
// spline output now leaving the output delay was computed); e is the error
// of sample n. With c = B^T nu_vec (basis weights), d = d_I + j d_Q =
// nu_vec'^T B q (spline slopes over nu, both paths), s the linear filter
// output, r = |s|^2 and v the filter input vector:
//
//   mu[n] = mu / ( 2 h_g^2/dr^2 * r * ||v||^2 * |d|^2 + tau * ||c||^2 + xi )
//   dq_j  = tau * mu[n] * e * c_j                      (I and Q path)
//   dw_k  = mu[n] * (2/dr) * (e_I d_I + e_Q d_Q) * s * conj(v_k)
//
// These are the update equations and the step-size normalisation of the
// description for zeta(s) = |s|^2 (so |zeta'(s)|^2 = r and zeta'(s)* = s)
// and an output filter replaced by its gain h_g and delay k_g. The caller
// adds dq to the control points of the stored segment and dw to the weights.
// One divider forms mu[n]; a non-positive denominator yields mu[n] = 0.
// Purely combinational.
module norm_sgd
  import wsaf_pkg::*;
#(
  parameter int  Q_LIN   = 16,
  parameter int  Q_SP    = 3,
  parameter real DELTA_R = 0.05,
  parameter real H_G     = 1.0
)(
  input  cfx_t e,
  input  fx_t  mu,
  input  fx_t  tau,
  input  fx_t  xi,
  input  fx_t  r,
  input  cfx_t s,
  input  cfx_t v   [Q_LIN],
  input  fx_t  c   [Q_SP],
  input  fx_t  d_i,
  input  fx_t  d_q,
  output fx_t  mu_n,
  output fx_t  den,
  output cfx_t dq  [Q_SP],
  output cfx_t dw  [Q_LIN]
);
  localparam fx_t K_W   = fx_const(2.0 * H_G * H_G / (DELTA_R * DELTA_R));
  localparam fx_t K_2DR = fx_const(2.0 / DELTA_R);

  fx_t  vnorm2, cnorm2, dmag2, g, tmu, b;
  cfx_t tme, bs;
  fxw_t quot;

  always_comb begin
    vnorm2 = '0;
    for (int k = 0; k < Q_LIN; k++)
      vnorm2 = fx_add(vnorm2, fx_add(fx_mul(v[k].re, v[k].re), fx_mul(v[k].im, v[k].im)));
    cnorm2 = '0;
    for (int j = 0; j < Q_SP; j++) cnorm2 = fx_add(cnorm2, fx_mul(c[j], c[j]));
    dmag2 = fx_add(fx_mul(d_i, d_i), fx_mul(d_q, d_q));

    den = fx_add(fx_add(fx_mul(K_W, fx_mul(fx_mul(r, vnorm2), dmag2)),
                        fx_mul(tau, cnorm2)), xi);
    if (den <= 0) begin
      quot = '0;
    end else begin
      quot = (fxw_t'(mu) <<< FRAC) / fxw_t'(den);
    end
    mu_n = fx_sat(quot);

    // control points
    tmu = fx_mul(tau, mu_n);
    tme = cfx_scale(tmu, e);
    for (int j = 0; j < Q_SP; j++) dq[j] = cfx_scale(c[j], tme);

    // weights
    g  = fx_add(fx_mul(e.re, d_i), fx_mul(e.im, d_q));
    b  = fx_mul(mu_n, fx_mul(K_2DR, g));
    bs = cfx_scale(b, s);
    for (int k = 0; k < Q_LIN; k++) begin
      dw[k].re = fx_add(fx_mul(bs.re, v[k].re), fx_mul(bs.im, v[k].im));
      dw[k].im = fx_sub(fx_mul(bs.im, v[k].re), fx_mul(bs.re, v[k].im));
    end
  end
endmodule
