// wsaf_pkg: number formats, shared types and arithmetic helpers of the
// complex-input-output Wiener spline adaptive filter (CIO-WSAF).
//
// All internal arithmetic is two's-complement fixed point with one common
// word, fx_t: FW = 40 bits with FRAC = 24 fractional bits (range +-32768,
// resolution 6e-8). The wide range is needed because the step-size
// normalisation multiplies by 1/dr^2 = 400 and the coupling factor tau goes
// up to about 1200. The I/O samples of the canceller are 16-bit Q1.15.
// These formats are this design's choice; the algorithm itself is specified
// in floating point.
//
// The spline basis matrices (uniform B-splines of order 1..4 and the cubic
// Catmull-Rom matrix) are the ones of the algorithm description and are
// produced here as fixed-point constants by a constant function.
package wsaf_pkg;

  localparam int SW    = 16;   // I/O sample width
  localparam int SFRAC = 15;   // I/O sample fractional bits (Q1.15)
  localparam int FW    = 40;   // internal word width
  localparam int FRAC  = 24;   // internal fractional bits

  typedef logic signed [SW-1:0]   smp_t;
  typedef logic signed [FW-1:0]   fx_t;
  typedef logic signed [2*FW-1:0] fxw_t;   // full-precision product

  typedef struct packed {
    fx_t re;
    fx_t im;
  } cfx_t;

  // spline family used by the adaptive nonlinearity
  typedef enum logic [0:0] {
    SPL_BSPLINE     = 1'b0,
    SPL_CATMULL_ROM = 1'b1
  } spline_e;

  localparam fx_t FX_MAX = {1'b0, {(FW-1){1'b1}}};
  localparam fx_t FX_MIN = {1'b1, {(FW-1){1'b0}}};

  // saturate a wide value to the internal word
  function automatic fx_t fx_sat(input fxw_t v);
    if (v > fxw_t'(FX_MAX))      return FX_MAX;
    else if (v < fxw_t'(FX_MIN)) return FX_MIN;
    else                         return v[FW-1:0];
  endfunction

  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    return fx_sat(fxw_t'(a) + fxw_t'(b));
  endfunction

  function automatic fx_t fx_sub(input fx_t a, input fx_t b);
    return fx_sat(fxw_t'(a) - fxw_t'(b));
  endfunction

  // fixed-point product, truncated towards minus infinity and saturated
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    fxw_t p;
    p = fxw_t'(a) * fxw_t'(b);
    return fx_sat(p >>> FRAC);
  endfunction

  function automatic cfx_t cfx_add(input cfx_t a, input cfx_t b);
    cfx_t r;
    r.re = fx_add(a.re, b.re);
    r.im = fx_add(a.im, b.im);
    return r;
  endfunction

  // complex product a*b
  function automatic cfx_t cfx_mul(input cfx_t a, input cfx_t b);
    cfx_t r;
    r.re = fx_sub(fx_mul(a.re, b.re), fx_mul(a.im, b.im));
    r.im = fx_add(fx_mul(a.re, b.im), fx_mul(a.im, b.re));
    return r;
  endfunction

  // real scalar times complex
  function automatic cfx_t cfx_scale(input fx_t a, input cfx_t b);
    cfx_t r;
    r.re = fx_mul(a, b.re);
    r.im = fx_mul(a, b.im);
    return r;
  endfunction

  // Q1.15 sample to internal format
  function automatic fx_t fx_from_smp(input smp_t s);
    return fx_t'(s) <<< (FRAC - SFRAC);
  endfunction

  // internal format to Q1.15 sample, rounded and saturated
  function automatic smp_t smp_from_fx(input fx_t v);
    fx_t r;
    r = (v + (fx_t'(1) <<< (FRAC - SFRAC - 1))) >>> (FRAC - SFRAC);
    if (r > fx_t'(32767))       return smp_t'(16'sh7fff);
    else if (r < -fx_t'(32768)) return smp_t'(16'sh8000);
    else                        return r[SW-1:0];
  endfunction

  // real constant to internal format (elaboration-time use only)
  function automatic fx_t fx_const(input real v);
    // the cast to longint rounds to nearest and covers the full fx_t range
    return fx_t'(longint'(v * (2.0 ** FRAC)));
  endfunction

  // Element (i, j) of the spline basis matrix of order qsp. Row i multiplies
  // nu^(qsp-1-i), column j the control point q_(iota-qsp+1+j).
  function automatic real basis_real(input int qsp, input spline_e typ,
                                     input int i, input int j);
    real m;
    m = 0.0;
    if (typ == SPL_CATMULL_ROM) begin
      case (i*4 + j)
        0:  m = -0.5;  1: m =  1.5;  2: m = -1.5;  3: m =  0.5;
        4:  m =  1.0;  5: m = -2.5;  6: m =  2.0;  7: m = -0.5;
        8:  m = -0.5;  9: m =  0.0; 10: m =  0.5; 11: m =  0.0;
        12: m =  0.0; 13: m =  1.0; 14: m =  0.0; 15: m =  0.0;
        default: m = 0.0;
      endcase
    end else begin
      case (qsp)
        1: m = 1.0;
        2: case (i*2 + j)
             0: m = -1.0; 1: m = 1.0; 2: m = 1.0; 3: m = 0.0;
             default: m = 0.0;
           endcase
        3: case (i*3 + j)
             0: m =  0.5; 1: m = -1.0; 2: m = 0.5;
             3: m = -1.0; 4: m =  1.0; 5: m = 0.0;
             6: m =  0.5; 7: m =  0.5; 8: m = 0.0;
             default: m = 0.0;
           endcase
        default: case (i*4 + j)
             0:  m = -1.0/6.0; 1: m =  0.5;     2: m = -0.5;     3: m = 1.0/6.0;
             4:  m =  0.5;     5: m = -1.0;     6: m =  0.5;     7: m = 0.0;
             8:  m = -0.5;     9: m =  0.0;    10: m =  0.5;    11: m = 0.0;
             12: m = 1.0/6.0; 13: m = 2.0/3.0; 14: m = 1.0/6.0; 15: m = 0.0;
             default: m = 0.0;
           endcase
      endcase
    end
    return m;
  endfunction

  // floor(sqrt(v)) of an unsigned wide value, restoring bit-serial method
  // unrolled over the result bits
  function automatic logic [FW:0] isqrt(input logic [2*FW+1:0] v);
    logic [2*FW+1:0] rem;
    logic [2*FW+1:0] root;
    logic [2*FW+1:0] bit_v;
    rem   = v;
    root  = '0;
    bit_v = {2'b01, {(2*FW){1'b0}}};
    for (int k = 0; k <= FW; k++) begin
      if (rem >= root + bit_v) begin
        rem  = rem - (root + bit_v);
        root = (root >> 1) + bit_v;
      end else begin
        root = root >> 1;
      end
      bit_v = bit_v >> 2;
    end
    return root[FW:0];
  endfunction

endpackage
