// fixed_nonlin: fixed (non-adaptive) nonlinearity of the Wiener model,
// r[n] = zeta(s[n]) = |s[n]|^2 = s_I^2 + s_Q^2.
//
// The squared magnitude is the choice the algorithm description recommends
// for IMD cancellation because it needs no square root in the adaptation
// loop; its Wirtinger derivative zeta'(s) = s* is used directly by the
// weight gradient (norm_sgd), so no extra output is needed for it.
// Purely combinational; input and output are in the internal fx format.
module fixed_nonlin
  import wsaf_pkg::*;
(
  input  cfx_t s,   // complex output of the adaptive linear filter
  output fx_t  r    // real input of the spline, >= 0
);
  always_comb r = fx_add(fx_mul(s.re, s.re), fx_mul(s.im, s.im));
endmodule
