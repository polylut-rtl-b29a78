// tb_polylut_jsc_m: the 5-layer JSC-M jet-tagging network of the degree
// study (16 features of 3 bits; layers of 64, 32, 32, 32 and 5 neurons;
// fan-in 4) at degree 2, one of the 24 points (2 to 5 layers, degree 1 to 6)
// of that study.  polylut_net_driver streams 150 vectors with bubbles and a
// reset and checks every output at the 5-clock latency of a 5-layer network.
module tb_polylut_jsc_m;
  import polylut_pkg::*;
  import polylut_ref_pkg::*;

  localparam int unsigned IN_FEATURES = 16, NUM_LAYERS = 5;
  localparam int unsigned LAYER_N [MAX_LAYERS] = '{64, 32, 32, 32, 5, 0, 0, 0};
  localparam int unsigned BETA0 = 3, BETA = 3, FANIN0 = 4, FANIN = 4, DEGREE = 2;
  localparam int unsigned NET_SEED = 32'h15ca;
  localparam int unsigned X_W = 16 * 3;
  localparam int unsigned Y_W = 5 * 3;

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
    .DEGREE(DEGREE), .NET_SEED(NET_SEED), .X_W(X_W), .Y_W(Y_W), .VECTORS(150)
  ) u_drv (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(out_valid), .y(y)
  );

  // Backstop in case the driver itself never finishes (its own watchdog
  // fires long before this).
  initial begin : backstop
    #20ms;
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
