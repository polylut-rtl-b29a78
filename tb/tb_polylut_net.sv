// tb_polylut_net: end-to-end test of the network at a reduced size.
//
// A 4-layer network (12 inputs; layers of 16, 12, 8 and 3 neurons; 2-bit
// codes; first layer 3-bit inputs with fan-in 2, later layers fan-in 3;
// degree 3) keeps the run short while using every per-layer option the top
// has: a first layer with its own width and fan-in, more than three layers.
// polylut_net_driver streams 300 vectors with bubbles and a reset and checks
// every output against the reference network at a latency of 4 clocks.
module tb_polylut_net;
  import polylut_pkg::*;
  import polylut_ref_pkg::*;

  localparam int unsigned IN_FEATURES = 12, NUM_LAYERS = 4;
  localparam int unsigned LAYER_N [MAX_LAYERS] = '{16, 12, 8, 3, 0, 0, 0, 0};
  localparam int unsigned BETA0 = 3, BETA = 2, FANIN0 = 2, FANIN = 3, DEGREE = 3;
  localparam int unsigned NET_SEED = 32'h0bad;
  localparam int unsigned X_W = 12 * 3;
  localparam int unsigned Y_W = 3 * 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic           rst_n, in_valid, out_valid;
  logic [X_W-1:0] x;
  logic [Y_W-1:0] y;

  polylut_net #(
    .IN_FEATURES(IN_FEATURES), .NUM_LAYERS(NUM_LAYERS), .LAYER_N(LAYER_N),
    .BETA0(BETA0), .BETA(BETA), .FANIN0(FANIN0), .FANIN(FANIN),
    .DEGREE(DEGREE), .NET_SEED(NET_SEED)
  ) u_dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(out_valid), .y(y)
  );

  polylut_net_driver #(
    .IN_FEATURES(IN_FEATURES), .NUM_LAYERS(NUM_LAYERS), .LAYER_N(LAYER_N),
    .BETA0(BETA0), .BETA(BETA), .FANIN0(FANIN0), .FANIN(FANIN),
    .DEGREE(DEGREE), .NET_SEED(NET_SEED), .X_W(X_W), .Y_W(Y_W), .VECTORS(300)
  ) u_drv (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(out_valid), .y(y)
  );
endmodule
