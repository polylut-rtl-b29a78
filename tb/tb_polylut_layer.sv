// tb_polylut_layer: self-checking test of one sparse PolyLUT layer.
//
// A 10-input, 12-neuron layer of 2-bit codes, fan-in 3, degree 3 is fed a
// new random input vector on every clock.  Each clock the registered output
// must equal the reference model applied to the vector of the clock before
// (one-clock latency, full throughput).  The reference gathers each
// neuron's inputs itself from the mask, so a wiring or ordering fault shows.
// The masks are also checked to hold FANIN distinct, in-range indices.
module tb_polylut_layer;
  import polylut_pkg::*;
  import polylut_ref_pkg::*;

  localparam int unsigned LAYER = 1, IN_N = 10, OUT_N = 12, BI = 2, BO = 2, F = 3, D = 3;
  localparam int unsigned NET_SEED = 32'hbeef;
  localparam int unsigned VECTORS = 400;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [IN_N*BI-1:0]  x = '0;
  logic [OUT_N*BO-1:0] y;

  polylut_layer #(.LAYER(LAYER), .IN_N(IN_N), .OUT_N(OUT_N), .BETA_IN(BI), .BETA_OUT(BO),
                  .FANIN(F), .DEGREE(D), .NET_SEED(NET_SEED))
    u_dut (.clk(clk), .x(x), .y(y));

  int checks = 0, failures = 0;
  int unsigned cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  initial begin : watchdog
    wait (cycles == 100000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [OUT_N*BO-1:0] layer_ref(input logic [IN_N*BI-1:0] v);
    logic [OUT_N*BO-1:0] r;
    int unsigned s;
    idx_arr_t idx;
    longint unsigned a;
    for (int unsigned n = 0; n < OUT_N; n++) begin
      s   = neuron_seed(NET_SEED, LAYER, n);
      idx = pick_inputs(s, IN_N, F);
      a   = 0;
      for (int unsigned j = 0; j < F; j++)
        a |= longint'((v >> (idx[j] * BI)) & ((1 << BI) - 1)) << (j * BI);
      r[n*BO +: BO] = BO'(neuron_ref(s, BI, BO, F, D, a));
    end
    return r;
  endfunction

  initial begin
    logic [IN_N*BI-1:0]  cur;
    logic [OUT_N*BO-1:0] exp_y;
    idx_arr_t idx;
    bit ok;
    // Mask sanity.
    for (int unsigned n = 0; n < OUT_N; n++) begin
      idx = pick_inputs(neuron_seed(NET_SEED, LAYER, n), IN_N, F);
      ok = 1'b1;
      for (int unsigned j = 0; j < F; j++) begin
        if (idx[j] >= IN_N) ok = 1'b0;
        for (int unsigned k = 0; k < j; k++) if (idx[j] == idx[k]) ok = 1'b0;
      end
      checks++;
      if (!ok) begin
        failures++;
        $display("neuron %0d: mask not distinct", n);
      end
    end
    // Streaming: a new vector every clock.
    @(negedge clk);
    x = {(IN_N*BI/32+1){$urandom}};
    for (int unsigned i = 0; i < VECTORS; i++) begin
      cur = x;
      @(posedge clk);
      #1;
      exp_y = layer_ref(cur);
      checks++;
      if (y !== exp_y) begin
        failures++;
        if (failures < 10) $display("vector %0d: got %h exp %h", i, y, exp_y);
      end
      @(negedge clk);
      x = {(IN_N*BI/32+1){$urandom}};
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
