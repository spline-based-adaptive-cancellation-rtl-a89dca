// tb_fixed_nonlin: checks r = |s|^2 against a real-valued reference for
// random and corner inputs.
module tb_fixed_nonlin;
  import wsaf_pkg::*;
  int checks = 0, failures = 0;
  cfx_t s;
  fx_t  r;
  fixed_nonlin dut (.s(s), .r(r));

  function automatic real f2r(input fx_t v); return real'(v) / 16777216.0; endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a, b, ref_r, got;
    for (int t = 0; t < 500; t++) begin
      a = (real'($urandom_range(0, 200000)) - 100000.0) / 50000.0;
      b = (real'($urandom_range(0, 200000)) - 100000.0) / 50000.0;
      if (t == 0) begin a = 0.0; b = 0.0; end
      if (t == 1) begin a = -1.5; b = 0.0; end
      if (t == 2) begin a = 0.0; b = 0.75; end
      s.re = fx_const(a);
      s.im = fx_const(b);
      #1;
      ref_r = f2r(s.re) * f2r(s.re) + f2r(s.im) * f2r(s.im);
      got   = f2r(r);
      checks++;
      if (got - ref_r > 1e-6 || ref_r - got > 1e-6) begin
        failures++;
        if (failures < 5) $display("mismatch s=(%f,%f) r=%f ref=%f", a, b, got, ref_r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
