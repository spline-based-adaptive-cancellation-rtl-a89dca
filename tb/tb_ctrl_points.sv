// tb_ctrl_points: checks the control-point register file against a
// reference array: direct writes, windowed reads at every valid iota,
// windowed saturating-free updates, clear and reset.
module tb_ctrl_points;
  import wsaf_pkg::*;
  localparam int N = 20, Q = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, wr_en = 0, upd_en = 0;
  logic [4:0] wr_idx = 0, rd_iota = 5'd2, upd_iota = 5'd2;
  cfx_t wr_val = '0;
  cfx_t rd_win [Q];
  cfx_t upd_delta [Q];
  cfx_t q_all [N];
  cfx_t model [N];

  ctrl_points dut (.clk, .rst_n, .clear, .wr_en, .wr_idx, .wr_val, .rd_iota,
    .rd_win, .upd_en, .upd_iota, .upd_delta, .q_all);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int io = Q - 1; io < N; io++) begin
      rd_iota = 5'(io);
      #1;
      for (int j = 0; j < Q; j++) begin
        checks++;
        if (rd_win[j] != model[io - Q + 1 + j]) begin
          failures++;
          if (failures < 5) $display("iota=%0d j=%0d mismatch", io, j);
        end
      end
    end
  endtask

  initial begin
    for (int j = 0; j < Q; j++) upd_delta[j] = '0;
    for (int i = 0; i < N; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    // direct writes
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = 5'(i);
      wr_val.re = fx_t'($urandom_range(0, 1 << 20)) - fx_t'(1 << 19);
      wr_val.im = fx_t'($urandom_range(0, 1 << 20)) - fx_t'(1 << 19);
      model[i] = wr_val;
    end
    @(negedge clk); wr_en = 0;
    check_all();
    // windowed updates
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      upd_en = 1;
      upd_iota = 5'($urandom_range(Q - 1, N - 1));
      for (int j = 0; j < Q; j++) begin
        upd_delta[j].re = fx_t'($urandom_range(0, 1 << 16)) - fx_t'(1 << 15);
        upd_delta[j].im = fx_t'($urandom_range(0, 1 << 16)) - fx_t'(1 << 15);
      end
      @(posedge clk); #1;
      for (int j = 0; j < Q; j++) begin
        model[int'(upd_iota) - Q + 1 + j].re += upd_delta[j].re;
        model[int'(upd_iota) - Q + 1 + j].im += upd_delta[j].im;
      end
    end
    @(negedge clk); upd_en = 0;
    check_all();
    for (int i = 0; i < N; i++) begin
      checks++;
      if (q_all[i] != model[i]) failures++;
    end
    // clear
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int i = 0; i < N; i++) model[i] = '0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
