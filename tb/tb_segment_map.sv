// tb_segment_map: checks segment index, normalised abscissa and clipping for
// r swept over and beyond the spline domain (default knots r0=-0.1, dr=0.05,
// N_SP=20, Q_SP=3: valid r in [0, 0.9)).
module tb_segment_map;
  import wsaf_pkg::*;
  int checks = 0, failures = 0;
  fx_t r, nu;
  logic [4:0] iota;
  logic clip_lo, clip_hi;
  segment_map dut (.r(r), .iota(iota), .nu(nu), .clip_lo(clip_lo), .clip_hi(clip_hi));

  function automatic real f2r(input fx_t v); return real'(v) / 16777216.0; endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real rv, u, nu_ref;
    int  io_ref;
    bit  lo_ref, hi_ref;
    int  n_lo = 0, n_hi = 0;
    for (int t = 0; t < 2000; t++) begin
      rv = (real'($urandom_range(0, 140000)) - 20000.0) / 100000.0;   // -0.2 .. 1.2
      r  = fx_const(rv);
      #1;
      u  = (f2r(r) + 0.1) / 0.05;
      io_ref = $floor(u);
      nu_ref = u - real'(io_ref);
      lo_ref = 0; hi_ref = 0;
      if (io_ref < 2)  begin io_ref = 2;  nu_ref = 0.0; lo_ref = 1; end
      if (io_ref > 19) begin io_ref = 19; nu_ref = 1.0; hi_ref = 1; end
      // skip samples sitting on a knot within rounding
      if (!(lo_ref || hi_ref) && (nu_ref < 1e-5 || nu_ref > 1.0 - 1e-5)) continue;
      checks++;
      if (int'(iota) != io_ref || clip_lo != lo_ref || clip_hi != hi_ref ||
          f2r(nu) - nu_ref > 1e-5 || nu_ref - f2r(nu) > 1e-5) begin
        failures++;
        if (failures < 5) $display("r=%f iota=%0d/%0d nu=%f/%f", rv, iota, io_ref, f2r(nu), nu_ref);
      end
      n_lo += int'(clip_lo);
      n_hi += int'(clip_hi);
    end
    checks++;
    if (n_lo == 0 || n_hi == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
