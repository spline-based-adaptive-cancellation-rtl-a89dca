// spline_eval: evaluation of one real-valued uniform spline section.
//
// Given the normalised abscissa nu and the Q_SP control points of the
// active segment, q[j] = q_(iota-Q_SP+1+j), it returns
//   phi  = nu_vec^T  B q   (spline value),
//   dphi = nu_vec'^T B q   (derivative with respect to nu),
//   c    = B^T nu_vec      (basis weights = gradient of phi w.r.t. q),
// with nu_vec = [nu^(Q_SP-1) ... nu 1]^T and nu_vec' its derivative.
// B is the B-spline matrix of order Q_SP or the Catmull-Rom matrix (order 4),
// as given by the algorithm description. The description suggests Horner's
// scheme for phi; this block forms the basis weights c first because the
// control-point gradient needs them anyway, and takes phi as c^T q.
// The CIO-WSAF uses two instances (I and Q path) that share nu.
// Purely combinational.
module spline_eval
  import wsaf_pkg::*;
#(
  parameter int      Q_SP   = 3,
  parameter spline_e SPLINE = SPL_BSPLINE
)(
  input  fx_t nu,
  input  fx_t q    [Q_SP],
  output fx_t phi,
  output fx_t dphi,
  output fx_t c    [Q_SP],
  output fx_t dc   [Q_SP]
);
  fx_t pw  [Q_SP];   // pw[i]  = nu^(Q_SP-1-i)
  fx_t dpw [Q_SP];   // dpw[i] = (Q_SP-1-i) nu^(Q_SP-2-i)

  always_comb begin
    pw[Q_SP-1] = fx_t'(1) <<< FRAC;
    for (int i = Q_SP - 2; i >= 0; i--) pw[i] = fx_mul(pw[i+1], nu);
    for (int i = 0; i < Q_SP; i++)
      dpw[i] = (i == Q_SP - 1) ? fx_t'(0) : fx_sat(fxw_t'(pw[i+1]) * fxw_t'(32'(Q_SP - 1 - i)));
  end

  for (genvar j = 0; j < Q_SP; j++) begin : g_col
    fx_t acc  [Q_SP+1];
    fx_t dacc [Q_SP+1];
    assign acc[0]  = '0;
    assign dacc[0] = '0;
    for (genvar i = 0; i < Q_SP; i++) begin : g_row
      localparam fx_t BIJ = fx_const(basis_real(Q_SP, SPLINE, i, j));
      assign acc[i+1]  = fx_add(acc[i],  fx_mul(pw[i],  BIJ));
      assign dacc[i+1] = fx_add(dacc[i], fx_mul(dpw[i], BIJ));
    end
    assign c[j]  = acc[Q_SP];
    assign dc[j] = dacc[Q_SP];
  end

  always_comb begin
    phi  = '0;
    dphi = '0;
    for (int j = 0; j < Q_SP; j++) begin
      phi  = fx_add(phi,  fx_mul(c[j],  q[j]));
      dphi = fx_add(dphi, fx_mul(dc[j], q[j]));
    end
  end
endmodule
