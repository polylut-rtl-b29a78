// polylut_net: a complete PolyLUT network, the top of the design.
//
// What it does: classifies (or scores) one quantized input vector per clock.
// The network is NUM_LAYERS fully parallel layers of L-LUT neurons
// (polylut_layer / polylut_neuron); each neuron evaluates a degree-DEGREE
// multivariate polynomial of its FANIN inputs followed by batch-norm and a
// quantized ReLU, all of it enumerated into one table.  Every layer is one
// register stage, so a result leaves NUM_LAYERS clocks after its input
// arrived and a new input can enter on every clock.
//
// Interface:
//   x         IN_FEATURES codes of BETA0 bits, feature i at [i*BETA0 +: BETA0]
//             (the inputs arrive already quantized).
//   in_valid  marks a clock on which x holds an input vector.
//   y         the last layer's LAYER_N[NUM_LAYERS-1] codes of BETA bits.
//   out_valid marks the clock on which y holds the result for the input that
//             was valid NUM_LAYERS clocks earlier.
//   rst_n     synchronous, active-low; clears only the valid pipeline.
// Layer 0 uses input width BETA0 and fan-in FANIN0, every later layer BETA
// and FANIN, matching the per-first-layer exceptions of the networks the
// design is sized for.  All layers output BETA-bit codes.
//
// Defaults: the JSC-M Lite jet-tagging network (16 features, layers of
// 64, 32 and 5 neurons, 3-bit codes, fan-in 4, degree 6).  The valid
// pipeline and the reset are this design's additions; the original design
// has data registers only.
module polylut_net #(
  parameter int unsigned IN_FEATURES = 16,
  parameter int unsigned NUM_LAYERS  = 3,
  parameter int unsigned LAYER_N [polylut_pkg::MAX_LAYERS] = '{64, 32, 5, 0, 0, 0, 0, 0},
  parameter int unsigned BETA0       = 3,
  parameter int unsigned BETA        = 3,
  parameter int unsigned FANIN0      = 4,
  parameter int unsigned FANIN       = 4,
  parameter int unsigned DEGREE      = 6,
  parameter int unsigned NET_SEED    = 32'h0000_2024
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   in_valid,
  input  logic [IN_FEATURES*BETA0-1:0]           x,
  output logic                                   out_valid,
  output logic [LAYER_N[NUM_LAYERS-1]*BETA-1:0]  y
);
  import polylut_pkg::*;

  for (genvar l = 0; l < NUM_LAYERS; l++) begin : g_layer
    localparam int unsigned IN_N  = (l == 0) ? IN_FEATURES : LAYER_N[(l == 0) ? 0 : l - 1];
    localparam int unsigned B_IN  = (l == 0) ? BETA0 : BETA;
    localparam int unsigned F_L   = (l == 0) ? FANIN0 : FANIN;

    logic [IN_N*B_IN-1:0]       a;
    logic [LAYER_N[l]*BETA-1:0] q;

    if (l == 0) begin : g_first
      assign a = x;
    end else begin : g_next
      assign a = g_layer[l-1].q;
    end

    polylut_layer #(
      .LAYER   (l),
      .IN_N    (IN_N),
      .OUT_N   (LAYER_N[l]),
      .BETA_IN (B_IN),
      .BETA_OUT(BETA),
      .FANIN   (F_L),
      .DEGREE  (DEGREE),
      .NET_SEED(NET_SEED)
    ) u_layer (
      .clk(clk),
      .x  (a),
      .y  (q)
    );
  end

  assign y = g_layer[NUM_LAYERS-1].q;

  // One valid bit per layer stage.
  logic [NUM_LAYERS-1:0] vld_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld_q <= '0;
    end else begin
      vld_q[0] <= in_valid;
      for (int unsigned i = 1; i < NUM_LAYERS; i++) vld_q[i] <= vld_q[i-1];
    end
  end

  assign out_valid = vld_q[NUM_LAYERS-1];

endmodule
