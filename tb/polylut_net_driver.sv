// polylut_net_driver: stimulus and scoreboard for a polylut_net instance.
//
// Drives a random input vector on every clock, with in_valid low on about
// one clock in four (bubbles) and one synchronous reset in mid-stream, and
// checks after every clock edge m:
//   * y equals the reference network applied to the vector driven at edge
//     m - NUM_LAYERS + 1 (one clock per layer, a new vector every clock);
//   * out_valid equals that vector's in_valid, cleared if a reset fell on any
//     of the edges it spent in the pipeline.
// It counts how often each mechanism happened: back-to-back valid vectors,
// bubbles, vectors dropped by the reset, neuron outputs held at 0 by the
// ReLU and held at the top code by saturation; one that never happened is
// a failure.  Ends with the TB_RESULT line; a watchdog bounds the run.
module polylut_net_driver
  import polylut_pkg::*, polylut_ref_pkg::*;
#(
  parameter int unsigned IN_FEATURES = 16,
  parameter int unsigned NUM_LAYERS  = 3,
  parameter int unsigned LAYER_N [MAX_LAYERS] = '{64, 32, 5, 0, 0, 0, 0, 0},
  parameter int unsigned BETA0       = 3,
  parameter int unsigned BETA        = 3,
  parameter int unsigned FANIN0      = 4,
  parameter int unsigned FANIN       = 4,
  parameter int unsigned DEGREE      = 6,
  parameter int unsigned NET_SEED    = 32'h2024,
  parameter int unsigned X_W      = 48,
  parameter int unsigned Y_W      = 15,
  parameter int unsigned VECTORS  = 200,
  parameter int unsigned WATCHDOG = 100000
) (
  input  logic           clk,
  output logic           rst_n,
  output logic           in_valid,
  output logic [X_W-1:0] x,
  input  logic           out_valid,
  input  logic [Y_W-1:0] y
);
  localparam int unsigned L = NUM_LAYERS;
  localparam int unsigned N_EDGES = VECTORS + L + 8;

  int checks = 0, failures = 0;
  int unsigned cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  initial begin : watchdog
    wait (cycles == WATCHDOG);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [X_W-1:0] hx   [N_EDGES];
  logic           hv   [N_EDGES];
  logic           hrst [N_EDGES];

  function automatic logic [X_W-1:0] rand_x();
    logic [X_W-1:0] r;
    for (int unsigned i = 0; i < X_W; i++) r[i] = 1'($urandom);
    return r;
  endfunction

  initial begin
    automatic int unsigned xin[], yout[];
    automatic int unsigned n_zero = 0, n_sat = 0;
    automatic int n_b2b = 0, n_bubble = 0, n_dropped = 0, n_results = 0;
    automatic logic [Y_W-1:0] exp_y;
    automatic logic exp_v;
    automatic int unsigned k;
    automatic int unsigned rst_edge;
    automatic net_cfg_t CFG;

    CFG.in_features = IN_FEATURES;
    CFG.num_layers  = NUM_LAYERS;
    CFG.layer_n     = LAYER_N;
    CFG.beta0       = BETA0;
    CFG.beta        = BETA;
    CFG.fanin0      = FANIN0;
    CFG.fanin       = FANIN;
    CFG.degree      = DEGREE;
    CFG.net_seed    = NET_SEED;

    rst_edge = L + VECTORS / 2;
    rst_n    = 1'b0;
    in_valid = 1'b0;
    x        = '0;
    // Reset the valid pipeline first (edges before edge 0).
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int unsigned m = 0; m < N_EDGES; m++) begin
      // Drive the stimulus captured at edge m.
      hx[m]   = rand_x();
      hv[m]   = (m < VECTORS) ? ($urandom % 4 != 0) : 1'b0;
      hrst[m] = (m == rst_edge);
      x        = hx[m];
      in_valid = hv[m];
      rst_n    = !hrst[m];
      if (m > 0 && hv[m] && hv[m-1]) n_b2b++;
      if (m > 0 && m < VECTORS && !hv[m] && hv[m-1]) n_bubble++;
      @(posedge clk);
      #1;
      if (m + 1 >= L) begin
        k = m + 1 - L;
        exp_v = hv[k];
        for (int unsigned e = k; e <= m; e++) if (hrst[e]) exp_v = 1'b0;
        if (hv[k] && !exp_v) n_dropped++;
        xin = new[CFG.in_features];
        for (int unsigned i = 0; i < CFG.in_features; i++)
          xin[i] = int'((hx[k] >> (i * CFG.beta0)) & ((1 << CFG.beta0) - 1));
        net_ref(CFG, xin, yout, n_zero, n_sat);
        exp_y = '0;
        for (int unsigned i = 0; i < yout.size(); i++)
          exp_y |= Y_W'(yout[i]) << (i * CFG.beta);
        checks++;
        if (out_valid !== exp_v) begin
          failures++;
          if (failures < 10) $display("edge %0d: out_valid %0b exp %0b", m, out_valid, exp_v);
        end
        checks++;
        if (y !== exp_y) begin
          failures++;
          if (failures < 10) $display("edge %0d: y %h exp %h", m, y, exp_y);
        end
        if (exp_v) n_results++;
      end
      @(negedge clk);
    end
    $display("results %0d, back-to-back %0d, bubbles %0d, dropped by reset %0d, relu-zero %0d, saturated %0d",
             n_results, n_b2b, n_bubble, n_dropped, n_zero, n_sat);
    checks++;
    if (n_b2b == 0 || n_bubble == 0 || n_dropped == 0 || n_zero == 0 || n_sat == 0 ||
        n_results == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
