// tb_cio_wsaf_pipe: end-to-end test of the pipelined CIO-WSAF variant, in
// which the spline output reaches the canceller K_G = 2 samples late and the
// update uses the quantities of sample n-2 (output filter = 2-sample delay).
// Otherwise identical to tb_cio_wsaf_top (all other parameters at default).
//
// Scenario: white complex Tx samples x (uniform, +-0.25 per component) leak
// through a 3-tap path h into the receiver, whose even-order nonlinearity
// produces y = g1 |h*x|^2 + g2 |h*x|^4 with complex g1, g2 (independent I
// and Q nonlinearities, IMD2 + IMD4). The power normalisation P^-1/2 is
// 1/sigma_x for every DCT bin (white input). The weights start close to the
// leakage path so the test converges in a few thousand samples.
//
// Checks:
//  * the first REF_N outputs against a real-valued model of the complete
//    algorithm (transform, filter, spline, normalised SGD, limiter);
//  * cancellation: the residual power of the last block is far below the
//    interference power, and well below the first block;
//  * one-clock output latency and idle cycles (in_valid low) being skipped;
//  * every mechanism happens: adaptation, limiter halving (rho_w lowered),
//    adaptation freeze (adapt_en = 0 keeps the weight norm), spline-domain
//    clipping (a burst of large Tx samples), direct control-point write,
//    re-initialisation;
//  * CI mode: with a Q-path interference that is a scaled copy of the I-path
//    one (y_Q = delta y_I), the real-output variant with the single-tap
//    scaler cancels both paths and the scaler finds w_cpl = delta.
module tb_cio_wsaf_pipe;
  import wsaf_pkg::*;
  localparam int  Q = 16, N = 20, QS = 3, KG = 2;
  localparam int  REF_N = 400;
  localparam real PI = 3.14159265358979;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic init = 0, adapt_en = 0, q_wr_en = 0, in_valid = 0;
  logic [4:0] q_wr_idx = '0;
  cfx_t q_wr_val = '0;
  fx_t  mu, tau, xi, rho_w;
  fx_t  pnorm [Q];
  cfx_t w_init [Q];
  smp_t x_i = 0, x_q = 0, y_i = 0, y_q = 0;
  logic out_valid, ev_update, ev_limit, ev_clip;
  smp_t canc_i, canc_q, yhat_i, yhat_q;
  fx_t  w_norm, w_cpl, lambda_cpl;
  logic ci_mode = 0;

  cio_wsaf_top #(.K_G(KG)) dut (.clk, .rst_n, .init, .adapt_en, .ci_mode, .lambda_cpl, .mu, .tau, .xi, .rho_w,
    .pnorm, .w_init, .q_wr_en, .q_wr_idx, .q_wr_val, .in_valid, .x_i, .x_q,
    .y_i, .y_q, .out_valid, .canc_i, .canc_q, .yhat_i, .yhat_q, .ev_update,
    .ev_limit, .ev_clip, .w_norm, .w_cpl);

  always #5 clk = ~clk;

  initial begin
    #4000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real f2r(input fx_t a); return real'(a) / 16777216.0; endfunction
  function automatic real s2r(input smp_t a); return real'(a) / 32768.0; endfunction
  function automatic smp_t r2s(input real a);
    real t;
    t = a * 32768.0;
    if (t > 32767.0) t = 32767.0;
    if (t < -32768.0) t = -32768.0;
    return smp_t'(longint'(t));
  endfunction
  function automatic real urnd(input real a);
    return a * (real'($urandom_range(0, 20000)) - 10000.0) / 10000.0;
  endfunction

  // ---------------- leakage / nonlinearity model ----------------
  real h_re [3] = '{1.0, 0.5, 0.0};
  real h_im [3] = '{0.0, 0.2, -0.2};
  real g1_re = 0.6, g1_im = -0.3, g2_re = -0.8, g2_im = 0.5;
  real xh_re [3], xh_im [3];   // Tx history for the leakage model
  smp_t yd_i [$], yd_q [$];    // Rx alignment delay of KG samples

  // ---------------- reference model state ----------------
  real D [Q][Q];
  real pn;
  real mxl_re [Q], mxl_im [Q], mw_re [Q], mw_im [Q], mq_re [N], mq_im [N];
  real B [3][3] = '{'{0.5, -1.0, 0.5}, '{-1.0, 1.0, 0.0}, '{0.5, 0.5, 0.0}};
  real r_mu, r_tau, r_xi, r_rho;

  // pipeline of the quantities of the last KG+1 samples (index 0 = newest)
  real p_v_re [KG+1][Q], p_v_im [KG+1][Q], p_s_re [KG+1], p_s_im [KG+1], p_r [KG+1];
  real p_c [KG+1][3], p_d_re [KG+1], p_d_im [KG+1], p_ph_re [KG+1], p_ph_im [KG+1];
  int  p_io [KG+1];

  // one step of the reference algorithm; returns y_hat = phi[n-KG]
  task automatic model_step(input real xr, input real xim, input real yr, input real yim,
                            input bit adapt, output real yh_re, output real yh_im);
    real u, nu, dc [3];
    real e_re, e_im, vn, cn, den, mn, g, b, bs_re, bs_im, l1;
    int  io;
    for (int m = KG; m > 0; m--) begin
      p_v_re[m] = p_v_re[m-1]; p_v_im[m] = p_v_im[m-1];
      p_s_re[m] = p_s_re[m-1]; p_s_im[m] = p_s_im[m-1]; p_r[m] = p_r[m-1];
      p_c[m] = p_c[m-1]; p_d_re[m] = p_d_re[m-1]; p_d_im[m] = p_d_im[m-1];
      p_ph_re[m] = p_ph_re[m-1]; p_ph_im[m] = p_ph_im[m-1]; p_io[m] = p_io[m-1];
    end
    for (int k = Q - 1; k > 0; k--) begin mxl_re[k] = mxl_re[k-1]; mxl_im[k] = mxl_im[k-1]; end
    mxl_re[0] = xr; mxl_im[0] = xim;
    p_s_re[0] = 0; p_s_im[0] = 0;
    for (int k = 0; k < Q; k++) begin
      p_v_re[0][k] = 0; p_v_im[0][k] = 0;
      for (int l = 0; l < Q; l++) begin
        p_v_re[0][k] += D[k][l] * mxl_re[l];
        p_v_im[0][k] += D[k][l] * mxl_im[l];
      end
      p_v_re[0][k] *= pn; p_v_im[0][k] *= pn;
      p_s_re[0] += mw_re[k] * p_v_re[0][k] - mw_im[k] * p_v_im[0][k];
      p_s_im[0] += mw_re[k] * p_v_im[0][k] + mw_im[k] * p_v_re[0][k];
    end
    p_r[0] = p_s_re[0]**2 + p_s_im[0]**2;
    u  = (p_r[0] + 0.1) / 0.05;
    io = $floor(u);
    nu = u - real'(io);
    if (io < QS - 1) begin io = QS - 1; nu = 0.0; end
    if (io > N - 1)  begin io = N - 1;  nu = 1.0; end
    p_io[0] = io;
    p_ph_re[0] = 0; p_ph_im[0] = 0; p_d_re[0] = 0; p_d_im[0] = 0;
    for (int j = 0; j < QS; j++) begin
      p_c[0][j] = nu*nu*B[0][j] + nu*B[1][j] + B[2][j];
      dc[j] = 2.0*nu*B[0][j] + B[1][j];
      p_ph_re[0] += p_c[0][j] * mq_re[io - QS + 1 + j];
      p_ph_im[0] += p_c[0][j] * mq_im[io - QS + 1 + j];
      p_d_re[0]  += dc[j] * mq_re[io - QS + 1 + j];
      p_d_im[0]  += dc[j] * mq_im[io - QS + 1 + j];
    end
    // output filter: delay of KG samples
    yh_re = p_ph_re[KG]; yh_im = p_ph_im[KG];
    e_re = yr - yh_re; e_im = yim - yh_im;
    if (adapt) begin
      vn = 0; cn = 0;
      for (int k = 0; k < Q; k++) vn += p_v_re[KG][k]**2 + p_v_im[KG][k]**2;
      for (int j = 0; j < QS; j++) cn += p_c[KG][j]**2;
      den = 2.0 / (0.05 * 0.05) * p_r[KG] * vn * (p_d_re[KG]**2 + p_d_im[KG]**2) + r_tau * cn + r_xi;
      mn  = r_mu / den;
      l1  = 0;
      for (int k = 0; k < Q; k++) l1 += $sqrt(mw_re[k]**2 + mw_im[k]**2);
      for (int j = 0; j < QS; j++) begin
        mq_re[p_io[KG] - QS + 1 + j] += r_tau * mn * e_re * p_c[KG][j];
        mq_im[p_io[KG] - QS + 1 + j] += r_tau * mn * e_im * p_c[KG][j];
      end
      g = e_re * p_d_re[KG] + e_im * p_d_im[KG];
      b = mn * (2.0 / 0.05) * g;
      bs_re = b * p_s_re[KG]; bs_im = b * p_s_im[KG];
      for (int k = 0; k < Q; k++) begin
        mw_re[k] += bs_re * p_v_re[KG][k] + bs_im * p_v_im[KG][k];
        mw_im[k] += bs_im * p_v_re[KG][k] - bs_re * p_v_im[KG][k];
        if (l1 >= r_rho) begin mw_re[k] /= 2.0; mw_im[k] /= 2.0; end
      end
    end
  endtask

  // ---------------- stimulus helpers ----------------
  int  n_samples = 0, n_idle = 0, n_update = 0, n_limit = 0, n_clip = 0;
  int  n_freeze = 0, n_qwrite = 0, n_init = 0, n_ci = 0;
  real blk_e, blk_y;
  real first_nmse, last_nmse;
  real x_amp = 0.25;

  task automatic gen_sample(output smp_t xi_s, output smp_t xq_s, output smp_t yi_s, output smp_t yq_s);
    real lr, li, a, yr, yim;
    xi_s = r2s(urnd(x_amp));
    xq_s = r2s(urnd(x_amp));
    for (int k = 2; k > 0; k--) begin xh_re[k] = xh_re[k-1]; xh_im[k] = xh_im[k-1]; end
    xh_re[0] = s2r(xi_s); xh_im[0] = s2r(xq_s);
    lr = 0; li = 0;
    for (int k = 0; k < 3; k++) begin
      lr += h_re[k] * xh_re[k] - h_im[k] * xh_im[k];
      li += h_re[k] * xh_im[k] + h_im[k] * xh_re[k];
    end
    a   = lr**2 + li**2;
    yr  = g1_re * a + g2_re * a * a;
    yim = g1_im * a + g2_im * a * a;
    // the Rx interference lags the Tx reference by KG samples, which aligns
    // it with the KG-sample output delay of the canceller
    yd_i.push_back(r2s(yr));
    yd_q.push_back(r2s(yim));
    yi_s = yd_i.pop_front();
    yq_s = yd_q.pop_front();
  endtask

  // drive one sample, return the registered outputs of that sample
  task automatic drive(input smp_t xi_s, input smp_t xq_s, input smp_t yi_s, input smp_t yq_s);
    @(negedge clk);
    in_valid = 1;
    x_i = xi_s; x_q = xq_s; y_i = yi_s; y_q = yq_s;
    @(posedge clk); #1;
    in_valid = 0;
    n_samples++;
    checks++;
    if (!out_valid) begin
      failures++;
      $display("out_valid missing one clock after in_valid");
    end
    n_update += int'(ev_update);
    n_limit  += int'(ev_limit);
    n_clip   += int'(ev_clip);
    // idle cycle now and then: out_valid must drop
    if ($urandom_range(0, 9) == 0) begin
      @(negedge clk);
      @(posedge clk); #1;
      n_idle++;
      checks++;
      if (out_valid) failures++;
    end
  endtask

  initial begin
    smp_t xs, xqs, ys, yqs;
    real  yh_re, yh_im, sx, err;
    fx_t  wn_before;
    int   bad_ref = 0;

    for (int k = 0; k < Q; k++)
      for (int l = 0; l < Q; l++)
        D[k][l] = ((k == 0) ? $sqrt(1.0 / Q) : $sqrt(2.0 / Q)) * $cos(PI * (2*l + 1) * k / (2.0 * Q));
    for (int k = 0; k < 3; k++) begin xh_re[k] = 0; xh_im[k] = 0; end
    for (int k = 0; k < KG; k++) begin yd_i.push_back('0); yd_q.push_back('0); end

    // configuration
    r_mu = 0.1; r_tau = 300.0; r_xi = 0.001; r_rho = 3.0;
    lambda_cpl = fx_const(0.9998);
    mu = fx_const(r_mu); tau = fx_const(r_tau); xi = fx_const(r_xi); rho_w = fx_const(r_rho);
    sx = $sqrt(2.0 * x_amp * x_amp / 3.0);
    for (int k = 0; k < Q; k++) pnorm[k] = fx_const(1.0 / sx);
    pn = f2r(pnorm[0]);
    // w such that w^T P^-1/2 D equals the leakage path, then perturbed
    for (int k = 0; k < Q; k++) begin
      real wr, wi;
      wr = 0; wi = 0;
      for (int l = 0; l < 3; l++) begin
        wr += h_re[l] * D[k][l] / pn;
        wi += h_im[l] * D[k][l] / pn;
      end
      w_init[k].re = fx_const(0.9 * wr + urnd(0.01));
      w_init[k].im = fx_const(0.9 * wi + urnd(0.01));
      mw_re[k] = f2r(w_init[k].re); mw_im[k] = f2r(w_init[k].im);
      mxl_re[k] = 0; mxl_im[k] = 0;
    end
    for (int i = 0; i < N; i++) begin mq_re[i] = 0; mq_im[i] = 0; end
    for (int m = 0; m <= KG; m++) begin
      for (int k = 0; k < Q; k++) begin p_v_re[m][k] = 0; p_v_im[m][k] = 0; end
      for (int j = 0; j < 3; j++) p_c[m][j] = 0;
      p_s_re[m] = 0; p_s_im[m] = 0; p_r[m] = 0; p_d_re[m] = 0; p_d_im[m] = 0;
      p_ph_re[m] = 0; p_ph_im[m] = 0; p_io[m] = QS - 1;
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); init = 1;
    @(negedge clk); init = 0; n_init++;
    adapt_en = 1;

    // ---- phase 1: adaptation, compared against the reference model ----
    blk_e = 0; blk_y = 0;
    for (int t = 0; t < 6000; t++) begin
      gen_sample(xs, xqs, ys, yqs);
      drive(xs, xqs, ys, yqs);
      if (t < REF_N) begin
        model_step(s2r(xs), s2r(xqs), s2r(ys), s2r(yqs), 1'b1, yh_re, yh_im);
        err = (s2r(yhat_i) - yh_re)**2 + (s2r(yhat_q) - yh_im)**2;
        checks++;
        if (err > 1e-6) begin
          failures++; bad_ref++;
          if (bad_ref < 5) $display("t=%0d yhat (%f,%f) model (%f,%f)", t, s2r(yhat_i), s2r(yhat_q), yh_re, yh_im);
        end
      end
      blk_e += s2r(canc_i)**2 + s2r(canc_q)**2;
      blk_y += s2r(ys)**2 + s2r(yqs)**2;
      if (t % 500 == 499) begin
        if (t == 499) first_nmse = 10.0 * $log10(blk_e / blk_y);
        last_nmse = 10.0 * $log10(blk_e / blk_y);
        $display("samples %5d  residual/interference %7.2f dB  l1(w) %f", t + 1, last_nmse, f2r(w_norm));
        blk_e = 0; blk_y = 0;
      end
    end
    checks++;
    if (last_nmse > -15.0) begin failures++; $display("cancellation too weak: %f dB", last_nmse); end
    checks++;
    if (last_nmse > first_nmse - 6.0) begin failures++; $display("no convergence: %f -> %f dB", first_nmse, last_nmse); end

    // ---- phase 2: adaptation frozen ----
    adapt_en = 0;
    gen_sample(xs, xqs, ys, yqs); drive(xs, xqs, ys, yqs);
    wn_before = w_norm;
    for (int t = 0; t < 200; t++) begin
      gen_sample(xs, xqs, ys, yqs); drive(xs, xqs, ys, yqs);
      n_freeze++;
      checks++;
      if (ev_update || w_norm != wn_before) failures++;
    end
    adapt_en = 1;

    // ---- phase 3: burst of large Tx samples drives r out of the spline domain ----
    begin
      int clip0;
      clip0 = n_clip;
      x_amp = 0.9;
      adapt_en = 0;
      for (int t = 0; t < 40; t++) begin gen_sample(xs, xqs, ys, yqs); drive(xs, xqs, ys, yqs); end
      x_amp = 0.25;
      for (int t = 0; t < 40; t++) begin gen_sample(xs, xqs, ys, yqs); drive(xs, xqs, ys, yqs); end
      adapt_en = 1;
      checks++;
      if (n_clip == clip0) failures++;
    end

    // ---- phase 4: limiter forced by a low norm target ----
    begin
      int lim0;
      lim0 = n_limit;
      rho_w = fx_const(0.5 * f2r(w_norm));
      for (int t = 0; t < 20; t++) begin gen_sample(xs, xqs, ys, yqs); drive(xs, xqs, ys, yqs); end
      checks++;
      if (n_limit == lim0) failures++;
      checks++;
      if (f2r(w_norm) > 0.5 * f2r(rho_w) + 0.6 * f2r(rho_w)) failures++;
      rho_w = fx_const(r_rho);
      // spline re-adapts after the halving
      for (int t = 0; t < 500; t++) begin gen_sample(xs, xqs, ys, yqs); drive(xs, xqs, ys, yqs); end
    end

    // ---- phase 5: direct control-point writes shape the spline ----
    // all points set to (5, -5): by partition of unity the replica becomes
    // 5 - 5j for every r, which saturates the Q1.15 outputs
    adapt_en = 0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      q_wr_en = 1; q_wr_idx = 5'(i); q_wr_val = '{re: fx_const(5.0), im: fx_const(-5.0)};
    end
    @(negedge clk);
    q_wr_en = 0; n_qwrite++;
    // the written spline reaches the output after the KG-sample output delay
    for (int t = 0; t <= KG; t++) begin gen_sample(xs, xqs, ys, yqs); drive(xs, xqs, ys, yqs); end
    checks++;
    if (yhat_i != smp_t'(16'sh7fff) || yhat_q != smp_t'(16'sh8000)) begin
      failures++; $display("control-point write not visible");
    end
    adapt_en = 1;

    // ---- phase 6: re-initialisation clears the spline ----
    @(negedge clk); init = 1;
    @(negedge clk); init = 0; n_init++;
    for (int t = 0; t <= KG; t++) begin gen_sample(xs, xqs, ys, yqs); drive(xs, xqs, ys, yqs); end
    checks++;
    if (yhat_i != 0 || yhat_q != 0) failures++;

    // ---- phase 7: CI-WSAF with Q-path scaler on a scaled Q-path ----
    // g = g_I (1 + j delta) with delta = -0.5
    g1_re = 0.6; g1_im = -0.3; g2_re = -0.8; g2_im = 0.4;
    ci_mode = 1;
    @(negedge clk); init = 1;
    @(negedge clk); init = 0; n_init++;
    blk_e = 0; blk_y = 0;
    for (int t = 0; t < 6000; t++) begin
      gen_sample(xs, xqs, ys, yqs);
      drive(xs, xqs, ys, yqs);
      n_ci++;
      // the replica is real up to the scaler: yhat_q = w_cpl * yhat_i
      if (t > 100 && t < 140) begin
        checks++;
        if ((s2r(yhat_q) - f2r(w_cpl) * s2r(yhat_i))**2 > 1e-7) begin
          failures++; $display("CI replica not scaled: %f %f %f", s2r(yhat_i), s2r(yhat_q), f2r(w_cpl));
        end
      end
      blk_e += s2r(canc_i)**2 + s2r(canc_q)**2;
      blk_y += s2r(ys)**2 + s2r(yqs)**2;
      if (t % 1000 == 999) begin
        if (t == 999) first_nmse = 10.0 * $log10(blk_e / blk_y);
        last_nmse = 10.0 * $log10(blk_e / blk_y);
        $display("CI samples %5d  residual/interference %7.2f dB  w_cpl %f", t + 1, last_nmse, f2r(w_cpl));
        blk_e = 0; blk_y = 0;
      end
    end
    checks++;
    if (last_nmse > -12.0) begin failures++; $display("CI cancellation too weak: %f dB", last_nmse); end
    checks++;
    if (f2r(w_cpl) < -0.56 || f2r(w_cpl) > -0.44) begin failures++; $display("w_cpl %f, expected -0.5", f2r(w_cpl)); end
    ci_mode = 0;

    $display("mechanisms: samples=%0d idle=%0d updates=%0d limiter=%0d clip=%0d freeze=%0d qwrite=%0d init=%0d ci=%0d",
             n_samples, n_idle, n_update, n_limit, n_clip, n_freeze, n_qwrite, n_init, n_ci);
    checks++;
    if (n_idle == 0 || n_update == 0 || n_limit == 0 || n_clip == 0 || n_freeze == 0 ||
        n_qwrite == 0 || n_init < 3 || n_ci == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
