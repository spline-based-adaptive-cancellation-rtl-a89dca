// sct_transform: transform-domain (TD) input decorrelation,
//   v[n] = P^(-1/2) D x[n],
// where x[n] = [x[n] ... x[n-Q_LIN+1]] is the complex Tx tap vector, D the
// orthonormal Q_LIN-point DCT-II matrix and P^(-1/2) a diagonal power
// normalisation. Following the algorithm description, P^(-1/2) is
// precomputed from the input auto-covariance outside the canceller; here it
// arrives on the pnorm port (one real gain per DCT bin), so it can be
// reprogrammed for each Tx allocation.
// The description cites a sliding DCT that reuses the delay-line structure
// to save operations; this block instead multiplies by the constant DCT
// matrix directly (same result, more constant multipliers). The DCT
// coefficients are computed at elaboration time from
//   D[k][l] = c_k cos(pi (2l+1) k / (2 Q_LIN)), c_0 = sqrt(1/Q_LIN),
//   c_k = sqrt(2/Q_LIN) otherwise.
// With TD_EN = 0 the block passes x through (the non-TD variant).
// Purely combinational.
module sct_transform
  import wsaf_pkg::*;
#(
  parameter int Q_LIN = 16,
  parameter bit TD_EN = 1'b1
)(
  input  cfx_t x     [Q_LIN],
  input  fx_t  pnorm [Q_LIN],
  output cfx_t v     [Q_LIN]
);
  function automatic fx_t dct_coef(input int k, input int l);
    real a, c;
    a = 3.14159265358979323846 * real'(2*l + 1) * real'(k) / (2.0 * real'(Q_LIN));
    c = (k == 0) ? $sqrt(1.0 / real'(Q_LIN)) : $sqrt(2.0 / real'(Q_LIN));
    return fx_const(c * $cos(a));
  endfunction

  for (genvar k = 0; k < Q_LIN; k++) begin : g_bin
    if (TD_EN) begin : g_td
      cfx_t acc [Q_LIN+1];
      assign acc[0] = '0;
      for (genvar l = 0; l < Q_LIN; l++) begin : g_tap
        localparam fx_t D_KL = dct_coef(k, l);
        assign acc[l+1] = cfx_add(acc[l], cfx_scale(D_KL, x[l]));
      end
      assign v[k] = cfx_scale(pnorm[k], acc[Q_LIN]);
    end else begin : g_bypass
      assign v[k] = x[k];
    end
  end
endmodule
