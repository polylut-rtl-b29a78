// tb_polylut_neuron: self-checking test of one L-LUT neuron.
//
// Two instances: the Fig. 1c-sized neuron (3 inputs of 2 bits, degree 2),
// whose whole 64-entry table is read and compared, and a neuron at the
// default size (4 inputs of 3 bits, degree 6) read at 600 random addresses.
// Each read is checked one clock after the address is applied (the register
// at the table output), and the output is checked to hold, not follow x,
// between clocks.  Both ends of the activation (ReLU floor at 0, saturation
// at the top code) must be seen.
module tb_polylut_neuron;
  import polylut_pkg::*;
  import polylut_ref_pkg::*;

  localparam int unsigned S_BI = 2, S_BO = 2, S_F = 3, S_D = 2, S_SEED = 32'h51;
  localparam int unsigned L_BI = 3, L_BO = 3, L_F = 4, L_D = 6, L_SEED = 32'h77;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [S_F*S_BI-1:0] xs = '0;
  logic [S_BO-1:0]     ys;
  logic [L_F*L_BI-1:0] xl = '0;
  logic [L_BO-1:0]     yl;

  polylut_neuron #(.BETA_IN(S_BI), .BETA_OUT(S_BO), .FANIN(S_F), .DEGREE(S_D), .SEED(S_SEED))
    u_small (.clk(clk), .x(xs), .y(ys));
  polylut_neuron #(.BETA_IN(L_BI), .BETA_OUT(L_BO), .FANIN(L_F), .DEGREE(L_D), .SEED(L_SEED))
    u_large (.clk(clk), .x(xl), .y(yl));

  int checks = 0, failures = 0;
  int n_zero = 0, n_sat = 0, n_mid = 0;
  int unsigned cycles = 0;

  always @(posedge clk) cycles <= cycles + 1;

  initial begin : watchdog
    wait (cycles == 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tally(input int unsigned v, input int unsigned vmax);
    if (v == 0) n_zero++;
    else if (v == vmax) n_sat++;
    else n_mid++;
  endtask

  initial begin
    int unsigned exp_s, exp_l, prev;
    logic [L_F*L_BI-1:0] a;
    @(negedge clk);
    // Small neuron: the whole table.
    for (int unsigned i = 0; i < 2 ** (S_F * S_BI); i++) begin
      xs = (S_F * S_BI)'(i);
      @(posedge clk);
      #1;
      exp_s = neuron_ref(S_SEED, S_BI, S_BO, S_F, S_D, longint'(i));
      checks++;
      if (ys != S_BO'(exp_s)) begin
        failures++;
        if (failures < 10) $display("small: addr %0d got %0d exp %0d", i, ys, exp_s);
      end
      tally(exp_s, 2 ** S_BO - 1);
      @(negedge clk);
    end
    // Large neuron: random addresses, output must hold between edges.
    for (int unsigned i = 0; i < 600; i++) begin
      a = (L_F * L_BI)'($urandom);
      if (i == 0) a = '0;
      if (i == 1) a = '1;
      prev = yl;
      xl = a;
      #2;
      checks++;
      if (yl != L_BO'(prev)) begin
        failures++;
        $display("large: output changed before the clock edge");
      end
      @(posedge clk);
      #1;
      exp_l = neuron_ref(L_SEED, L_BI, L_BO, L_F, L_D, longint'(a));
      checks++;
      if (yl != L_BO'(exp_l)) begin
        failures++;
        if (failures < 10) $display("large: addr %h got %0d exp %0d", a, yl, exp_l);
      end
      tally(exp_l, 2 ** L_BO - 1);
      @(negedge clk);
    end
    checks++;
    if (n_zero == 0 || n_sat == 0 || n_mid == 0) begin
      failures++;
      $display("activation range not covered: zero=%0d sat=%0d mid=%0d", n_zero, n_sat, n_mid);
    end
    $display("outputs: %0d at zero, %0d saturated, %0d in between", n_zero, n_sat, n_mid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
