// tb_polylut_net_full: end-to-end test of the network at its default size,
// the JSC-M Lite jet-tagging network (16 features of 3 bits; layers of 64,
// 32 and 5 neurons; fan-in 4; degree 6; 3 clocks of latency).
//
// The top is instantiated with no parameter overrides.  polylut_net_driver
// streams 120 vectors with bubbles and a mid-stream reset and compares every
// output with the reference network, which evaluates each of the 101
// neurons' 210 monomials directly.
module tb_polylut_net_full;
  import polylut_pkg::*;

  localparam int unsigned X_W = 16 * 3;
  localparam int unsigned Y_W = 5 * 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic           rst_n, in_valid, out_valid;
  logic [X_W-1:0] x;
  logic [Y_W-1:0] y;

  polylut_net u_dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(out_valid), .y(y)
  );

  polylut_net_driver #(.X_W(X_W), .Y_W(Y_W), .VECTORS(120)) u_drv (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(out_valid), .y(y)
  );
endmodule
