// cio_wsaf_top: complex-input-output Wiener spline adaptive filter (CIO-WSAF)
// for digital cancellation of even-order intermodulation (IMD2/4/6)
// self-interference in an FDD receiver.
//
// Signal flow per sample n (one sample per clock enable in_valid):
//   x[n]  complex Tx baseband sample -> Q_LIN tap delay line x[n]
//   v[n]  = P^-1/2 D x[n]                      (sct_transform, TD variant)
//   s[n]  = w[n-1]^T v[n]                      (lin_filter)
//   r[n]  = |s[n]|^2                           (fixed_nonlin)
//   iota[n], nu[n] on knots r0 + m*dr          (segment_map)
//   phi[n] = nu^T B (q_I + j q_Q)[window]      (ctrl_points, 2x spline_eval)
//   y_hat[n] = phi[n - K_G]                    (output_delay, h_out = delay)
//   e[n]  = y[n] - y_hat[n]                    -> canc output (cancelled Rx)
//   normalised SGD update of q and w from e[n] and the quantities of
//   sample n-K_G                               (norm_sgd)
//   weight halving when ||w[n-1]||_1 >= rho_w  (norm_limiter)
//
// Everything from x[n] to the new w and q is evaluated within the clock
// cycle of the sample, so the arithmetic matches the algorithm exactly,
// including the k_g-delayed update of the pipelined variant. The outputs are
// registered: canc/yhat of sample n appear one clock after in_valid.
// Parameter defaults follow the evaluated configuration: Q_LIN = 16,
// N_SP = 20, Q_SP = 3 (quadratic B-spline), r0 = -0.1, dr = 0.05,
// transformed input, l1 norm limiter, no output delay (K_G = 0; K_G = 2 is the
// pipelined variant). Number formats (Q1.15 I/O, Q15.24 internal), the
// run-time configuration ports and the init/adapt_en controls are this
// design's choices. adapt_en = 0 freezes w and q (e.g. near OFDM symbol
// boundaries) while cancellation continues.
// init (one clock) loads w_init into the weights and clears the control
// points; reset clears both and the delay lines.
//
// ci_mode = 1 selects the complex-input (CI-WSAF) variant with real control
// points: the spline output is real, the Q-path replica is w_cpl * y_saf with
// w_cpl from the single-tap weighted LS scaler (cpl_scaler, lambda_cpl), and
// only the I-path error drives the SGD. With q_Q = 0 the CIO gradients reduce
// to the CI ones except for the control-point step, which is 2 tau mu[n] e c
// in the CI derivation and tau mu[n] e c in the CIO one; the step is doubled
// in this mode. Change ci_mode only together with init.
//
// Lint notes: the step size mu_n and denominator of norm_sgd, the derivative
// weights dc of both spline evaluators, the basis weights of the Q evaluator
// (equal to the I ones) and the q_all observation port of ctrl_points are not
// needed here and stay unread or unconnected. The reset net is also sampled
// synchronously by the index assertions in ctrl_points, hence the
// synchronous/asynchronous reset note on rst_n.
module cio_wsaf_top
  import wsaf_pkg::*;
#(
  parameter int      Q_LIN   = 16,
  parameter int      N_SP    = 20,
  parameter int      Q_SP    = 3,
  parameter spline_e SPLINE  = SPL_BSPLINE,
  parameter real     R0      = -0.1,
  parameter real     DELTA_R = 0.05,
  parameter int      K_G     = 0,
  parameter bit      TD_EN   = 1'b1,
  parameter int      NORM_P  = 1,
  localparam int     IW      = $clog2(N_SP)
)(
  input  logic          clk,
  input  logic          rst_n,
  // control and configuration
  input  logic          init,
  input  logic          adapt_en,
  input  logic          ci_mode,   // 1: CI-WSAF with Q-path scaler
  input  fx_t           lambda_cpl,// forgetting factor of the scaler
  input  fx_t           mu,        // step size, 0..1
  input  fx_t           tau,       // control-point coupling factor
  input  fx_t           xi,        // regularisation of the normalisation
  input  fx_t           rho_w,     // weight norm target of the limiter
  input  fx_t           pnorm  [Q_LIN],  // P^-1/2, one gain per DCT bin
  input  cfx_t          w_init [Q_LIN],
  input  logic          q_wr_en,   // direct control-point write
  input  logic [IW-1:0] q_wr_idx,
  input  cfx_t          q_wr_val,
  // sample stream
  input  logic          in_valid,
  input  smp_t          x_i,       // Tx baseband (reference)
  input  smp_t          x_q,
  input  smp_t          y_i,       // Rx baseband with IMD interference
  input  smp_t          y_q,
  output logic          out_valid,
  output smp_t          canc_i,    // Rx baseband after cancellation, e[n]
  output smp_t          canc_q,
  output smp_t          yhat_i,    // interference replica
  output smp_t          yhat_q,
  // status, valid with out_valid
  output logic          ev_update, // an adaptation step was taken
  output logic          ev_limit,  // the weights were halved by the limiter
  output logic          ev_clip,   // r[n] fell outside the spline domain
  output fx_t           w_norm,    // ||w[n-1]||_p^p
  output fx_t           w_cpl      // Q-path coupling estimate (ci_mode)
);
  typedef struct packed {
    cfx_t                  s;
    fx_t                   r;
    cfx_t [Q_LIN-1:0]      v;
    fx_t  [Q_SP-1:0]       c;
    fx_t                   d_i;
    fx_t                   d_q;
    logic [IW-1:0]         iota;
  } grad_t;

  // ---------------- Tx tap delay line ----------------
  cfx_t xline [Q_LIN];   // xline[0] = x[n-1]
  cfx_t xvec  [Q_LIN];
  always_comb begin
    xvec[0].re = fx_from_smp(x_i);
    xvec[0].im = fx_from_smp(x_q);
    for (int k = 1; k < Q_LIN; k++) xvec[k] = xline[k-1];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < Q_LIN; k++) xline[k] <= '0;
    end else if (in_valid) begin
      for (int k = 0; k < Q_LIN; k++) xline[k] <= xvec[k];
    end
  end

  // ---------------- forward path ----------------
  cfx_t v [Q_LIN];
  cfx_t s;
  cfx_t w [Q_LIN];
  fx_t  r;
  logic [IW-1:0] iota;
  fx_t  nu;
  logic clip_lo, clip_hi;
  cfx_t win [Q_SP];
  fx_t  q_i [Q_SP];
  fx_t  q_q [Q_SP];
  fx_t  phi_i, phi_q, dphi_i, dphi_q;
  fx_t  c_i [Q_SP];
  fx_t  dc_i [Q_SP];
  fx_t  c_q [Q_SP];
  fx_t  dc_q [Q_SP];
  cfx_t phi, y_hat;

  sct_transform #(.Q_LIN(Q_LIN), .TD_EN(TD_EN)) u_sct (
    .x(xvec), .pnorm(pnorm), .v(v));

  logic upd, limit;
  cfx_t dw [Q_LIN];
  cfx_t dq [Q_SP];
  cfx_t dq_wr [Q_SP];
  grad_t gd;

  lin_filter #(.Q_LIN(Q_LIN)) u_lin (
    .clk, .rst_n, .load(init), .w_init(w_init), .v(v), .s(s), .w(w),
    .upd_en(upd), .halve(limit), .dw(dw));

  fixed_nonlin u_zeta (.s(s), .r(r));

  segment_map #(.N_SP(N_SP), .Q_SP(Q_SP), .R0(R0), .DELTA_R(DELTA_R)) u_seg (
    .r(r), .iota(iota), .nu(nu), .clip_lo(clip_lo), .clip_hi(clip_hi));

  ctrl_points #(.N_SP(N_SP), .Q_SP(Q_SP)) u_q (
    .clk, .rst_n, .clear(init), .wr_en(q_wr_en), .wr_idx(q_wr_idx),
    .wr_val(q_wr_val), .rd_iota(iota), .rd_win(win),
    .upd_en(upd), .upd_iota(gd.iota), .upd_delta(dq_wr), .q_all());

  always_comb
    for (int j = 0; j < Q_SP; j++) begin
      q_i[j] = win[j].re;
      q_q[j] = win[j].im;
    end

  spline_eval #(.Q_SP(Q_SP), .SPLINE(SPLINE)) u_spl_i (
    .nu(nu), .q(q_i), .phi(phi_i), .dphi(dphi_i), .c(c_i), .dc(dc_i));
  spline_eval #(.Q_SP(Q_SP), .SPLINE(SPLINE)) u_spl_q (
    .nu(nu), .q(q_q), .phi(phi_q), .dphi(dphi_q), .c(c_q), .dc(dc_q));

  assign phi = '{re: phi_i, im: phi_q};

  output_delay #(.K_G(K_G)) u_hout (
    .clk, .rst_n, .en(in_valid), .phi(phi), .y_hat(y_hat));

  // ---------------- gradient data of sample n-K_G ----------------
  grad_t g_now;
  always_comb begin
    g_now.s    = s;
    g_now.r    = r;
    for (int k = 0; k < Q_LIN; k++) g_now.v[k] = v[k];
    for (int j = 0; j < Q_SP; j++)  g_now.c[j] = c_i[j];
    g_now.d_i  = dphi_i;
    g_now.d_q  = ci_mode ? '0 : dphi_q;
    g_now.iota = iota;
  end

  if (K_G == 0) begin : g_nopipe
    assign gd = g_now;
  end else begin : g_pipe
    grad_t gpipe [K_G];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k < K_G; k++) begin
          gpipe[k]      <= '0;
          gpipe[k].iota <= IW'(Q_SP - 1);
        end
      end else if (in_valid) begin
        gpipe[0] <= g_now;
        for (int k = 1; k < K_G; k++) gpipe[k] <= gpipe[k-1];
      end
    end
    assign gd = gpipe[K_G-1];
  end

  // ---------------- error and update ----------------
  cfx_t e;
  cfx_t gv [Q_LIN];
  fx_t  gc [Q_SP];
  fx_t  mu_n, den;
  cfx_t e_sgd;
  fx_t  cpl_yq, cpl_eq, cpl_w;
  always_comb begin
    e.re = fx_sub(fx_from_smp(y_i), y_hat.re);
    e.im = ci_mode ? cpl_eq : fx_sub(fx_from_smp(y_q), y_hat.im);
    e_sgd.re = e.re;
    e_sgd.im = ci_mode ? '0 : e.im;
    for (int j = 0; j < Q_SP; j++)
      dq_wr[j] = ci_mode ? '{re: fx_add(dq[j].re, dq[j].re), im: '0} : dq[j];
    for (int k = 0; k < Q_LIN; k++) gv[k] = gd.v[k];
    for (int j = 0; j < Q_SP; j++)  gc[j] = gd.c[j];
  end

  norm_sgd #(.Q_LIN(Q_LIN), .Q_SP(Q_SP), .DELTA_R(DELTA_R), .H_G(1.0)) u_sgd (
    .e(e_sgd), .mu(mu), .tau(tau), .xi(xi), .r(gd.r), .s(gd.s), .v(gv), .c(gc),
    .d_i(gd.d_i), .d_q(gd.d_q), .mu_n(mu_n), .den(den), .dq(dq), .dw(dw));

  // single-tap Q-path scaler of the CI variant, fed with the real replica
  cpl_scaler #(.MODE_NLMS(1'b0)) u_cpl (
    .clk, .rst_n, .en(upd && ci_mode), .clear(init), .y_saf(y_hat.re),
    .y_q(fx_from_smp(y_q)), .lambda(lambda_cpl), .mu_cpl('0), .xi('0),
    .y_hat_q(cpl_yq), .e_q(cpl_eq), .w_cpl(cpl_w));

  fx_t norm;
  norm_limiter #(.Q_LIN(Q_LIN), .NORM_P(NORM_P)) u_lim (
    .w(w), .rho_w(rho_w), .norm(norm), .limit(limit));

  assign upd = in_valid && adapt_en && !init && !q_wr_en;

  // ---------------- registered outputs ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      canc_i    <= '0;
      canc_q    <= '0;
      yhat_i    <= '0;
      yhat_q    <= '0;
      ev_update <= 1'b0;
      ev_limit  <= 1'b0;
      ev_clip   <= 1'b0;
      w_norm    <= '0;
      w_cpl     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        canc_i    <= smp_from_fx(e.re);
        canc_q    <= smp_from_fx(e.im);
        yhat_i    <= smp_from_fx(y_hat.re);
        yhat_q    <= smp_from_fx(ci_mode ? cpl_yq : y_hat.im);
        ev_update <= upd;
        ev_limit  <= upd && limit;
        ev_clip   <= clip_lo || clip_hi;
        w_norm    <= norm;
        w_cpl     <= cpl_w;
      end
    end
  end
endmodule
