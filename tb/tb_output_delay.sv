// tb_output_delay: checks that the output filter delays phi by exactly
// K_G = 2 input samples (default) and holds while en is low.
module tb_output_delay;
  import wsaf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  cfx_t phi, y_hat;
  cfx_t hist [$];

  output_delay dut (.clk, .rst_n, .en, .phi, .y_hat);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    phi = '0;
    hist.push_back('0);
    hist.push_back('0);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      phi.re = fx_t'($urandom);
      phi.im = fx_t'($urandom);
      #1;
      // y_hat of the current sample is phi of two accepted samples earlier
      checks++;
      if (y_hat != hist[hist.size() - 2]) begin
        failures++;
        if (failures < 5) $display("t=%0d mismatch", t);
      end
      if (en) hist.push_back(phi);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
