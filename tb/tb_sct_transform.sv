// tb_sct_transform: checks v = P^-1/2 D x against a real-valued orthonormal
// DCT-II of random complex tap vectors with random per-bin gains; also
// checks energy preservation (Parseval) for unit gains.
module tb_sct_transform;
  import wsaf_pkg::*;
  localparam int Q = 16;
  int checks = 0, failures = 0;
  cfx_t x [Q];
  fx_t  pn [Q];
  cfx_t v [Q];
  sct_transform dut (.x(x), .pnorm(pn), .v(v));

  function automatic real f2r(input fx_t a); return real'(a) / 16777216.0; endfunction

  task automatic chk(input real got, input real exp);
    checks++;
    if (got - exp > 1e-4 || exp - got > 1e-4) begin
      failures++;
      if (failures < 5) $display("got %f exp %f", got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real re, im, d, ex, ev;
    for (int t = 0; t < 60; t++) begin
      for (int l = 0; l < Q; l++) begin
        x[l].re = fx_const((real'($urandom_range(0, 2000)) - 1000.0) / 1000.0);
        x[l].im = fx_const((real'($urandom_range(0, 2000)) - 1000.0) / 1000.0);
        pn[l]   = (t < 10) ? fx_const(1.0) : fx_const(real'($urandom_range(100, 4000)) / 1000.0);
      end
      #1;
      ex = 0; ev = 0;
      for (int k = 0; k < Q; k++) begin
        re = 0; im = 0;
        for (int l = 0; l < Q; l++) begin
          d = ((k == 0) ? $sqrt(1.0 / Q) : $sqrt(2.0 / Q)) *
              $cos(3.14159265358979 * (2*l + 1) * k / (2.0 * Q));
          re += d * f2r(x[l].re);
          im += d * f2r(x[l].im);
        end
        chk(f2r(v[k].re), f2r(pn[k]) * re);
        chk(f2r(v[k].im), f2r(pn[k]) * im);
        ex += f2r(x[k].re)**2 + f2r(x[k].im)**2;
        ev += f2r(v[k].re)**2 + f2r(v[k].im)**2;
      end
      if (t < 10) begin
        checks++;
        if (ex - ev > 1e-3 || ev - ex > 1e-3) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
