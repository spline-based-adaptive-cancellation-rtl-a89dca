// tb_spline_eval: checks spline value, derivative and basis weights of the
// quadratic B-spline (order 3, default) and the cubic Catmull-Rom spline
// against a real-valued evaluation of nu^T B q with the textbook matrices.
// Also checks partition of unity (sum of basis weights = 1) and that the
// Catmull-Rom spline passes through its control point at nu = 0.
module tb_spline_eval;
  import wsaf_pkg::*;
  int checks = 0, failures = 0;

  fx_t nu;
  fx_t q3 [3];
  fx_t q4 [4];
  fx_t phi3, dphi3, phi4, dphi4;
  fx_t c3 [3];
  fx_t dc3 [3];
  fx_t c4 [4];
  fx_t dc4 [4];

  spline_eval dut3 (.nu(nu), .q(q3), .phi(phi3), .dphi(dphi3), .c(c3), .dc(dc3));
  spline_eval #(.Q_SP(4), .SPLINE(SPL_CATMULL_ROM)) dut4 (
    .nu(nu), .q(q4), .phi(phi4), .dphi(dphi4), .c(c4), .dc(dc4));

  function automatic real f2r(input fx_t v); return real'(v) / 16777216.0; endfunction

  task automatic chk(input real got, input real exp, input string what);
    checks++;
    if (got - exp > 2e-5 || exp - got > 2e-5) begin
      failures++;
      if (failures < 8) $display("%s got %f exp %f", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real n, b3 [3][3], b4 [4][4], e3, de3, e4, de4, cc, dcc, sum;
    real qr3 [3], qr4 [4];
    b3 = '{'{0.5, -1.0, 0.5}, '{-1.0, 1.0, 0.0}, '{0.5, 0.5, 0.0}};
    b4 = '{'{-0.5, 1.5, -1.5, 0.5}, '{1.0, -2.5, 2.0, -0.5},
           '{-0.5, 0.0, 0.5, 0.0}, '{0.0, 1.0, 0.0, 0.0}};
    for (int t = 0; t < 300; t++) begin
      n  = real'($urandom_range(0, 99999)) / 100000.0;
      if (t == 0) n = 0.0;
      nu = fx_const(n);
      for (int j = 0; j < 3; j++) begin qr3[j] = (real'($urandom_range(0, 4000)) - 2000.0) / 1000.0; q3[j] = fx_const(qr3[j]); end
      for (int j = 0; j < 4; j++) begin qr4[j] = (real'($urandom_range(0, 4000)) - 2000.0) / 1000.0; q4[j] = fx_const(qr4[j]); end
      #1;
      n = f2r(nu);
      e3 = 0; de3 = 0; sum = 0;
      for (int j = 0; j < 3; j++) begin
        cc  = n*n*b3[0][j] + n*b3[1][j] + b3[2][j];
        dcc = 2.0*n*b3[0][j] + b3[1][j];
        chk(f2r(c3[j]), cc, "c3");
        chk(f2r(dc3[j]), dcc, "dc3");
        e3 += cc * f2r(q3[j]); de3 += dcc * f2r(q3[j]); sum += f2r(c3[j]);
      end
      chk(f2r(phi3), e3, "phi3");
      chk(f2r(dphi3), de3, "dphi3");
      chk(sum, 1.0, "unity3");
      e4 = 0; de4 = 0;
      for (int j = 0; j < 4; j++) begin
        cc  = n*n*n*b4[0][j] + n*n*b4[1][j] + n*b4[2][j] + b4[3][j];
        dcc = 3.0*n*n*b4[0][j] + 2.0*n*b4[1][j] + b4[2][j];
        e4 += cc * f2r(q4[j]); de4 += dcc * f2r(q4[j]);
      end
      chk(f2r(phi4), e4, "phi4");
      chk(f2r(dphi4), de4, "dphi4");
      if (t == 0) chk(f2r(phi4), f2r(q4[1]), "cr_interp");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
