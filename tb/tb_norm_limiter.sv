// tb_norm_limiter: checks the l1 norm sum_k |w_k| (default NORM_P = 1) and
// the squared l2 norm (NORM_P = 2) of random complex weights, and the
// limit decision against rho_w = 3.
module tb_norm_limiter;
  import wsaf_pkg::*;
  localparam int Q = 16;
  int checks = 0, failures = 0;
  cfx_t w [Q];
  fx_t  rho, n1, n2;
  logic l1, l2;
  int   n_lim = 0, n_nolim = 0;

  norm_limiter dut1 (.w(w), .rho_w(rho), .norm(n1), .limit(l1));
  norm_limiter #(.NORM_P(2)) dut2 (.w(w), .rho_w(rho), .norm(n2), .limit(l2));

  function automatic real f2r(input fx_t a); return real'(a) / 16777216.0; endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real e1, e2, a, amp;
    rho = fx_const(3.0);
    for (int t = 0; t < 400; t++) begin
      amp = real'($urandom_range(1, 500)) / 1000.0;
      for (int k = 0; k < Q; k++) begin
        w[k].re = fx_const(amp * (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0);
        w[k].im = fx_const(amp * (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0);
      end
      #1;
      e1 = 0; e2 = 0;
      for (int k = 0; k < Q; k++) begin
        a = f2r(w[k].re)**2 + f2r(w[k].im)**2;
        e1 += $sqrt(a); e2 += a;
      end
      checks += 3;
      if (f2r(n1) - e1 > 1e-5 || e1 - f2r(n1) > 1e-5) begin
        failures++;
        if (failures < 5) $display("l1 got %f exp %f", f2r(n1), e1);
      end
      if (f2r(n2) - e2 > 1e-5 || e2 - f2r(n2) > 1e-5) failures++;
      if ((e1 > 3.00001 && !l1) || (e1 < 2.99999 && l1)) failures++;
      if (l1) n_lim++; else n_nolim++;
    end
    checks++;
    if (n_lim == 0 || n_nolim == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
