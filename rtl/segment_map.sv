// segment_map: maps the spline input r[n] onto the uniform knot grid.
//
// With knots r0 + m*dr the segment index is iota = floor((r - r0)/dr) and the
// normalised abscissa inside the segment is nu = (r - r0)/dr - iota, in [0,1).
// Both come from one product u = (r - r0) * (1/dr): the integer part of u is
// iota, its fraction is nu (for r0 a multiple of dr this equals the
// r/dr - floor(r/dr) of the algorithm description).
//
// iota must lie in [Q_SP-1, N_SP-1], otherwise the control-point window
// would under- or overrun. The algorithm description only states this
// range; clamping to its ends (nu = 0 below, nu = 1-2^-FRAC above) and
// reporting it on clip_lo / clip_hi is this design's choice.
// Combinational. Defaults N_SP = 20, Q_SP = 3, r0 = -0.1, dr = 0.05.
module segment_map
  import wsaf_pkg::*;
#(
  parameter int  N_SP    = 20,
  parameter int  Q_SP    = 3,
  parameter real R0      = -0.1,
  parameter real DELTA_R = 0.05,
  localparam int IW      = $clog2(N_SP)
)(
  input  fx_t           r,
  output logic [IW-1:0] iota,
  output fx_t           nu,
  output logic          clip_lo,
  output logic          clip_hi
);
  localparam fx_t R0_FX  = fx_const(R0);
  localparam fx_t INV_DR = fx_const(1.0 / DELTA_R);
  localparam fx_t NU_MAX = (fx_t'(1) <<< FRAC) - fx_t'(1);
  localparam int  SEG_LO = Q_SP - 1;
  localparam int  SEG_HI = N_SP - 1;

  fx_t u;
  fx_t seg;   // integer part of u, as integer

  always_comb begin
    u       = fx_mul(fx_sub(r, R0_FX), INV_DR);
    seg     = u >>> FRAC;
    nu      = u & NU_MAX;
    clip_lo = 1'b0;
    clip_hi = 1'b0;
    iota    = IW'(seg);
    if (seg < fx_t'(SEG_LO)) begin
      clip_lo = 1'b1;
      iota    = IW'(Q_SP - 1);
      nu      = '0;
    end else if (seg > fx_t'(SEG_HI)) begin
      clip_hi = 1'b1;
      iota    = IW'(N_SP - 1);
      nu      = NU_MAX;
    end
  end
endmodule
