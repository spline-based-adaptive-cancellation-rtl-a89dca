// tb_norm_sgd: checks the normalised step size mu[n] and the control-point
// and weight increments against a real-valued evaluation of the update
// equations (zeta = |.|^2, h_g = 1, dr = 0.05).
module tb_norm_sgd;
  import wsaf_pkg::*;
  localparam int Q = 16, QS = 3;
  int checks = 0, failures = 0;
  cfx_t e, s;
  fx_t  mu, tau, xi, r, d_i, d_q, mu_n, den;
  cfx_t v [Q];
  fx_t  c [QS];
  cfx_t dq [QS];
  cfx_t dw [Q];

  norm_sgd dut (.e, .mu, .tau, .xi, .r, .s, .v, .c, .d_i, .d_q, .mu_n, .den, .dq, .dw);

  function automatic real f2r(input fx_t a); return real'(a) / 16777216.0; endfunction
  function automatic real rnd(input real a); return a * (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0; endfunction

  task automatic chk(input real got, input real exp, input real rel);
    real tol;
    tol = rel * ((exp < 0) ? -exp : exp) + 2e-6;
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      if (failures < 8) $display("got %g exp %g", got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real vn, cn, dd, dn, mn, g, b, br, bi;
    for (int t = 0; t < 300; t++) begin
      e.re = fx_const(rnd(0.5)); e.im = fx_const(rnd(0.5));
      s.re = fx_const(rnd(0.8)); s.im = fx_const(rnd(0.8));
      r    = fx_add(fx_mul(s.re, s.re), fx_mul(s.im, s.im));
      mu   = fx_const(real'($urandom_range(1, 1000)) / 1000.0);
      tau  = fx_const(real'($urandom_range(1, 1000)));
      xi   = fx_const(real'($urandom_range(1, 500)) / 1000.0);
      d_i  = fx_const(rnd(0.3)); d_q = fx_const(rnd(0.3));
      for (int k = 0; k < Q; k++) begin v[k].re = fx_const(rnd(1.5)); v[k].im = fx_const(rnd(1.5)); end
      for (int j = 0; j < QS; j++) c[j] = fx_const(real'($urandom_range(0, 1000)) / 1000.0);
      #1;
      vn = 0; cn = 0;
      for (int k = 0; k < Q; k++) vn += f2r(v[k].re)**2 + f2r(v[k].im)**2;
      for (int j = 0; j < QS; j++) cn += f2r(c[j])**2;
      dd = f2r(d_i)**2 + f2r(d_q)**2;
      dn = 2.0 / (0.05 * 0.05) * f2r(r) * vn * dd + f2r(tau) * cn + f2r(xi);
      mn = f2r(mu) / dn;
      chk(f2r(den), dn, 1e-4);
      chk(f2r(mu_n), mn, 1e-3);
      // the increments are checked against the quantised step size
      mn = f2r(mu_n);
      for (int j = 0; j < QS; j++) begin
        chk(f2r(dq[j].re), f2r(tau) * mn * f2r(e.re) * f2r(c[j]), 2e-3);
        chk(f2r(dq[j].im), f2r(tau) * mn * f2r(e.im) * f2r(c[j]), 2e-3);
      end
      g  = f2r(e.re) * f2r(d_i) + f2r(e.im) * f2r(d_q);
      b  = mn * (2.0 / 0.05) * g;
      br = b * f2r(s.re); bi = b * f2r(s.im);
      for (int k = 0; k < Q; k++) begin
        chk(f2r(dw[k].re), br * f2r(v[k].re) + bi * f2r(v[k].im), 2e-3);
        chk(f2r(dw[k].im), bi * f2r(v[k].re) - br * f2r(v[k].im), 2e-3);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
