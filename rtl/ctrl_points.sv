// ctrl_points: register file of the N_SP complex spline control points
// q[i] = q_I[i] + j q_Q[i] (the two real splines of the I and Q path).
//
// Read: the window of Q_SP points ending at rd_iota,
//   rd_win[j] = q[rd_iota - Q_SP + 1 + j], combinational.
// Update: when upd_en is high, upd_delta[j] is added (saturating) to
//   q[upd_iota - Q_SP + 1 + j] at the clock edge; only Q_SP points change
//   per sample because the B-spline basis has local support.
// Write: wr_en loads one point directly (e.g. to pre-shape the spline);
// clear zeroes all points. Reset value is zero; the algorithm description
// gives no initial control points, so zero is this design's choice.
// Priority: clear > wr_en > upd_en.
module ctrl_points
  import wsaf_pkg::*;
#(
  parameter int  N_SP = 20,
  parameter int  Q_SP = 3,
  localparam int IW   = $clog2(N_SP)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          wr_en,
  input  logic [IW-1:0] wr_idx,
  input  cfx_t          wr_val,
  input  logic [IW-1:0] rd_iota,
  output cfx_t          rd_win    [Q_SP],
  input  logic          upd_en,
  input  logic [IW-1:0] upd_iota,
  input  cfx_t          upd_delta [Q_SP],
  output cfx_t          q_all     [N_SP]
);
  cfx_t q [N_SP];

  always_comb begin
    for (int j = 0; j < Q_SP; j++)
      rd_win[j] = q[int'(rd_iota) - Q_SP + 1 + j];
    q_all = q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_SP; i++) q[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < N_SP; i++) q[i] <= '0;
    end else if (wr_en) begin
      q[wr_idx] <= wr_val;
    end else if (upd_en) begin
      for (int j = 0; j < Q_SP; j++)
        q[int'(upd_iota) - Q_SP + 1 + j] <=
          cfx_add(q[int'(upd_iota) - Q_SP + 1 + j], upd_delta[j]);
    end
  end

  // the segment map keeps both indices inside [Q_SP-1, N_SP-1]
  a_rd_range: assert property (@(posedge clk) disable iff (!rst_n)
    int'(rd_iota) >= Q_SP - 1 && int'(rd_iota) <= N_SP - 1);
  a_upd_range: assert property (@(posedge clk) disable iff (!rst_n)
    upd_en |-> (int'(upd_iota) >= Q_SP - 1 && int'(upd_iota) <= N_SP - 1));
endmodule
