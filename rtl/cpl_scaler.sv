// cpl_scaler: single-tap Q-path scaler of the real-output CI-WSAF variant.
//
// When the Q-path interference is a scaled copy of the I-path one, the
// complex replica is y_hat = y_saf + j w_cpl y_saf, with the coupling w_cpl
// estimated from the Q-path error. Two estimators are provided (MODE):
//
//  CPL_LS (default, the one used in the published evaluation):
//    r_yy[n] = lambda r_yy[n-1] + y_Q[n] y_saf[n]
//    r_ss[n] = lambda r_ss[n-1] + y_saf[n]^2
//    w_cpl[n] = r_yy[n] / r_ss[n],   replica uses w_cpl[n]
//  The published text calls this an exponentially weighted LS estimate, while
//  its recursion is printed as r[n] = r[n-1] + lambda*(...), which would not
//  forget anything; this block follows the exponentially weighted reading
//  (lambda = 0.9998 acts as forgetting factor).
//
//  CPL_NLMS:
//    e_Q[n]   = y_Q[n] - w_cpl[n-1] y_saf[n]
//    w_cpl[n] = w_cpl[n-1] + mu_cpl / (y_saf[n]^2 + xi) * e_Q[n] y_saf[n]
//  The published text writes e_Q with w_cpl[n]; the a-priori w_cpl[n-1] used here
//  avoids the implicit equation (this design's choice).
//
// One division per sample. Inputs are sampled when en is high; clear resets
// the statistics and the weight. Outputs are combinational from the current
// sample (y_hat_q, e_q) and the registered state (w_cpl).
module cpl_scaler
  import wsaf_pkg::*;
#(
  parameter bit MODE_NLMS = 1'b0   // 0: weighted LS, 1: N-LMS
)(
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic clear,
  input  fx_t  y_saf,     // real spline output (I-path replica)
  input  fx_t  y_q,       // Q-path of the Rx signal
  input  fx_t  lambda,    // forgetting factor (LS)
  input  fx_t  mu_cpl,    // step size (N-LMS)
  input  fx_t  xi,        // regularisation (N-LMS)
  output fx_t  y_hat_q,   // Q-path replica w_cpl * y_saf
  output fx_t  e_q,       // Q-path error
  output fx_t  w_cpl      // coupling estimate after this sample
);
  fx_t r_yy, r_ss, w_q;
  fx_t r_yy_n, r_ss_n, w_n, ss, w_use;
  fxw_t quot;

  always_comb begin
    ss     = fx_mul(y_saf, y_saf);
    r_yy_n = fx_add(fx_mul(lambda, r_yy), fx_mul(y_q, y_saf));
    r_ss_n = fx_add(fx_mul(lambda, r_ss), ss);
    if (!MODE_NLMS) begin
      if (r_ss_n <= 0) quot = '0;
      else             quot = (fxw_t'(r_yy_n) <<< FRAC) / fxw_t'(r_ss_n);
      w_n   = fx_sat(quot);
      w_use = w_n;
      e_q   = fx_sub(y_q, fx_mul(w_use, y_saf));
    end else begin
      w_use = w_q;
      e_q   = fx_sub(y_q, fx_mul(w_use, y_saf));
      if (fx_add(ss, xi) <= 0) quot = '0;
      else quot = (fxw_t'(fx_mul(mu_cpl, fx_mul(e_q, y_saf))) <<< FRAC) / fxw_t'(fx_add(ss, xi));
      w_n = fx_add(w_q, fx_sat(quot));
    end
    y_hat_q = fx_mul(w_use, y_saf);
    w_cpl   = w_n;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_yy <= '0;
      r_ss <= '0;
      w_q  <= '0;
    end else if (clear) begin
      r_yy <= '0;
      r_ss <= '0;
      w_q  <= '0;
    end else if (en) begin
      r_yy <= r_yy_n;
      r_ss <= r_ss_n;
      w_q  <= w_n;
    end
  end
endmodule
