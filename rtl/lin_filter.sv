// lin_filter: adaptive linear section of the Wiener model.
//
// Holds the Q_LIN complex weights w and forms s[n] = w[n-1]^T v[n]
// (plain transpose, no conjugation, as in the algorithm description) from the
// (possibly transformed) input vector v[n], combinationally.
// At a clock edge with upd_en high the weights take
//   w[n] = w[n-1] + dw           (halve = 0)
//   w[n] = (w[n-1] + dw) / 2     (halve = 1, the norm limiter's shift),
// with saturating arithmetic. load copies w_init into the weights (the
// description initialises them to fixed random constants); reset clears them.
// Priority: load > upd_en.
module lin_filter
  import wsaf_pkg::*;
#(
  parameter int Q_LIN = 16
)(
  input  logic clk,
  input  logic rst_n,
  input  logic load,
  input  cfx_t w_init [Q_LIN],
  input  cfx_t v      [Q_LIN],
  output cfx_t s,
  output cfx_t w      [Q_LIN],
  input  logic upd_en,
  input  logic halve,
  input  cfx_t dw     [Q_LIN]
);
  cfx_t w_q [Q_LIN];

  always_comb begin
    s = '0;
    for (int k = 0; k < Q_LIN; k++) s = cfx_add(s, cfx_mul(w_q[k], v[k]));
    w = w_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < Q_LIN; k++) w_q[k] <= '0;
    end else if (load) begin
      w_q <= w_init;
    end else if (upd_en) begin
      for (int k = 0; k < Q_LIN; k++) begin
        cfx_t nw;
        nw = cfx_add(w_q[k], dw[k]);
        if (halve) begin
          nw.re = nw.re >>> 1;
          nw.im = nw.im >>> 1;
        end
        w_q[k] <= nw;
      end
    end
  end
endmodule
