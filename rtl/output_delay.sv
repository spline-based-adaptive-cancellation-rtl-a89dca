// output_delay: the output filter h_out of the Wiener SAF, realised as a pure
// delay of K_G samples, h_out[n] = delta[n - K_G] (group delay k_g = K_G,
// passband gain h_g = 1). The algorithm description uses this to model
// pipeline stages in the output computation; K_G = 2 is the pipelined case
// it evaluates, K_G = 0 the unpipelined one (then the block is a wire).
// The delay line advances on en (one step per input sample) and resets to 0.
// With K_G = 0 (as in the top's default) clk, rst_n and en are unused.
module output_delay
  import wsaf_pkg::*;
#(
  parameter int K_G = 2
)(
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  cfx_t phi,
  output cfx_t y_hat
);
  if (K_G == 0) begin : g_nodelay
    assign y_hat = phi;
  end else begin : g_delay
    cfx_t line [K_G];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k < K_G; k++) line[k] <= '0;
      end else if (en) begin
        line[0] <= phi;
        for (int k = 1; k < K_G; k++) line[k] <= line[k-1];
      end
    end
    assign y_hat = line[K_G-1];
  end
endmodule
