// tb_cpl_scaler: checks the single-tap Q-path scaler in both modes against a
// real-valued model of its recursions, and that both estimates approach the
// true coupling delta_Q = -1 of a scaled Q-path (y_Q = -y_saf + noise).
module tb_cpl_scaler;
  import wsaf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, clear = 0;
  fx_t  y_saf, y_q, lambda, mu_cpl, xi;
  fx_t  yh_ls, eq_ls, w_ls, yh_nl, eq_nl, w_nl;

  cpl_scaler dut_ls (.clk, .rst_n, .en, .clear, .y_saf, .y_q, .lambda, .mu_cpl, .xi,
                     .y_hat_q(yh_ls), .e_q(eq_ls), .w_cpl(w_ls));
  cpl_scaler #(.MODE_NLMS(1'b1)) dut_nl (.clk, .rst_n, .en, .clear, .y_saf, .y_q,
                     .lambda, .mu_cpl, .xi, .y_hat_q(yh_nl), .e_q(eq_nl), .w_cpl(w_nl));
  always #5 clk = ~clk;

  function automatic real f2r(input fx_t a); return real'(a) / 16777216.0; endfunction
  function automatic real urnd(input real a); return a * (real'($urandom_range(0, 20000)) - 10000.0) / 10000.0; endfunction

  task automatic chk(input real got, input real exp, input real tol, input string what);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      if (failures < 6) $display("%s got %f exp %f", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ryy, rss, wls, wnl, ys, yq, lam, m, x, e;
    lam = 0.9998; m = 0.05; x = 0.01;
    lambda = fx_const(lam); mu_cpl = fx_const(m); xi = fx_const(x);
    ryy = 0; rss = 0; wls = 0; wnl = 0;
    y_saf = '0; y_q = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      en = 1;
      y_saf = fx_const(urnd(0.3));
      y_q   = fx_const(-f2r(y_saf) + urnd(0.01));
      #1;
      ys = f2r(y_saf); yq = f2r(y_q);
      ryy = f2r(lambda) * ryy + yq * ys;
      rss = f2r(lambda) * rss + ys * ys;
      wls = ryy / rss;
      e   = yq - wnl * ys;
      if (t < 200) begin
        chk(f2r(w_ls), wls, 1e-3, "w_ls");
        chk(f2r(eq_ls), yq - wls * ys, 1e-4, "e_ls");
        chk(f2r(eq_nl), e, 1e-4, "e_nl");
        chk(f2r(yh_nl), wnl * ys, 1e-4, "yh_nl");
      end
      wnl = wnl + m / (ys * ys + x) * e * ys;
      if (t < 200) chk(f2r(w_nl), wnl, 1e-3, "w_nl");
      @(posedge clk);
    end
    chk(f2r(w_ls), -1.0, 0.01, "ls converged");
    chk(f2r(w_nl), -1.0, 0.05, "nlms converged");
    // clear returns to zero
    @(negedge clk); en = 0; clear = 1;
    @(negedge clk); clear = 0;
    #1;
    chk(f2r(yh_nl), 0.0, 1e-9, "cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
