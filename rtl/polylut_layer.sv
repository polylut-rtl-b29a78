// polylut_layer: one fully parallel layer of a PolyLUT network.
//
// What it does: OUT_N neurons (polylut_neuron L-LUTs) read the IN_N codes of
// the previous layer, each through its own fixed sparse input mask of FANIN
// distinct inputs, and register their BETA_OUT-bit outputs.  The layer is
// one pipeline stage: y holds f(x) one clock after x.
//
// How it works: the input mask of every neuron is fixed before training and
// is wiring only.  polylut_pkg::pick_inputs() draws it at elaboration from
// the neuron's seed; the neuron's own seed also selects its coefficients, so
// the whole layer is fixed by (NET_SEED, LAYER).  Input j of a neuron is put
// at bits [j*BETA_IN +: BETA_IN] of that neuron's table address.
//
// Interface: x packs code i of the previous layer at [i*BETA_IN +: BETA_IN];
// y packs neuron n at [n*BETA_OUT +: BETA_OUT].  No reset, no handshake.
//
// From the paper: fixed a-priori sparsity with fan-in F, one L-LUT per
// neuron, register at each L-LUT output, one clock per layer.  This design's
// own choice: the random draw of the masks (the paper builds them from
// expander graphs, whose construction it does not give).
module polylut_layer #(
  parameter int unsigned LAYER    = 0,
  parameter int unsigned IN_N     = 16,
  parameter int unsigned OUT_N    = 64,
  parameter int unsigned BETA_IN  = 3,
  parameter int unsigned BETA_OUT = 3,
  parameter int unsigned FANIN    = 4,
  parameter int unsigned DEGREE   = 6,
  parameter int unsigned NET_SEED = 32'h0000_2024
) (
  input  logic                      clk,
  input  logic [IN_N*BETA_IN-1:0]   x,
  output logic [OUT_N*BETA_OUT-1:0] y
);
  import polylut_pkg::*;

  for (genvar n = 0; n < OUT_N; n++) begin : g_neuron
    localparam int unsigned NSEED = neuron_seed(NET_SEED, LAYER, n);
    localparam idx_arr_t    IDX   = pick_inputs(NSEED, IN_N, FANIN);

    logic [FANIN*BETA_IN-1:0] addr;

    for (genvar j = 0; j < FANIN; j++) begin : g_in
      assign addr[j*BETA_IN +: BETA_IN] = x[IDX[j]*BETA_IN +: BETA_IN];
    end

    polylut_neuron #(
      .BETA_IN (BETA_IN),
      .BETA_OUT(BETA_OUT),
      .FANIN   (FANIN),
      .DEGREE  (DEGREE),
      .SEED    (NSEED)
    ) u_neuron (
      .clk(clk),
      .x  (addr),
      .y  (y[n*BETA_OUT +: BETA_OUT])
    );
  end

endmodule
