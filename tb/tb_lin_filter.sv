// tb_lin_filter: checks s = w^T v (no conjugation), weight loading, the
// additive update and the halving applied by the norm limiter.
module tb_lin_filter;
  import wsaf_pkg::*;
  localparam int Q = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0, upd_en = 0, halve = 0;
  cfx_t w_init [Q];
  cfx_t v [Q];
  cfx_t dw [Q];
  cfx_t w [Q];
  cfx_t s;
  real  wr [Q], wi [Q];

  lin_filter dut (.clk, .rst_n, .load, .w_init, .v, .s, .w, .upd_en, .halve, .dw);
  always #5 clk = ~clk;

  function automatic real f2r(input fx_t a); return real'(a) / 16777216.0; endfunction
  function automatic real rnd(input real a); return a * (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0; endfunction

  task automatic chk(input real got, input real exp, input real tol);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      if (failures < 5) $display("got %f exp %f", got, exp);
    end
  endtask

  task automatic check_s();
    real sr, si;
    for (int k = 0; k < Q; k++) begin
      v[k].re = fx_const(rnd(1.0)); v[k].im = fx_const(rnd(1.0));
    end
    #1;
    sr = 0; si = 0;
    for (int k = 0; k < Q; k++) begin
      sr += wr[k] * f2r(v[k].re) - wi[k] * f2r(v[k].im);
      si += wr[k] * f2r(v[k].im) + wi[k] * f2r(v[k].re);
    end
    chk(f2r(s.re), sr, 1e-4);
    chk(f2r(s.im), si, 1e-4);
  endtask

  initial begin
    #300000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < Q; k++) begin
      w_init[k].re = fx_const(rnd(0.3)); w_init[k].im = fx_const(rnd(0.3));
      wr[k] = f2r(w_init[k].re); wi[k] = f2r(w_init[k].im);
      dw[k] = '0; v[k] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); load = 1;
    @(negedge clk); load = 0;
    for (int t = 0; t < 5; t++) check_s();
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      upd_en = 1; halve = (t % 7 == 3);
      for (int k = 0; k < Q; k++) begin
        dw[k].re = fx_const(rnd(0.05)); dw[k].im = fx_const(rnd(0.05));
      end
      @(posedge clk); #1;
      upd_en = 0;
      for (int k = 0; k < Q; k++) begin
        wr[k] += f2r(dw[k].re); wi[k] += f2r(dw[k].im);
        if (halve) begin wr[k] /= 2.0; wi[k] /= 2.0; end
        chk(f2r(w[k].re), wr[k], 1e-6);
        chk(f2r(w[k].im), wi[k], 1e-6);
      end
      check_s();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
