// polylut_neuron: one PolyLUT neuron as a logical LUT (L-LUT) with a
// registered output.
//
// What it does: y <= TABLE[x] on every rising clock edge, where x is the
// concatenation of the neuron's FANIN input codes (input 0 in the least
// significant BETA_IN bits) and TABLE holds, for every one of the
// 2^(FANIN*BETA_IN) input combinations, the neuron function
//     y = phi[ sum_{all monomials m of degree <= DEGREE} w_m * m(u) ]
// with u_j = x_j / 2^BETA_IN and phi the folded batch-norm + quantized ReLU
// (clamp of the floor to [0, 2^BETA_OUT - 1]; see polylut_pkg).  Because the
// whole polynomial, summation, normalisation and activation are enumerated
// into the table, the datapath holds no multiplier or adder: one table read
// and one register, one clock cycle of latency.
//
// How the table is built: the original flow enumerates the trained neuron
// in software and writes the table out as a ROM.  Here the same enumeration
// is written in SystemVerilog and runs once, at initialisation, from the
// coefficients of polylut_pkg::coef_weight(SEED, .).  To keep it cheap it
// evaluates the polynomial on the whole input grid one input at a time
// (a tensor-product Horner scheme): starting from the coefficient tensor
// indexed by the exponents (e_0..e_{F-1}), stage k replaces exponent e_k by
// input value x_k, summing c * x_k^e over e.  After FANIN stages the tensor
// is indexed by (x_0..x_{F-1}), which is exactly the table address.  Every
// intermediate value is an exact integer: coefficient w_e is pre-scaled by
// 2^(BETA_IN*(DEGREE - |e|)), so the final value is 2^(BETA_IN*DEGREE) times
// the polynomial, and the activation is a shift and a clamp.
//
// Interface: clk; x (FANIN*BETA_IN bits); y (BETA_OUT bits), valid one clock
// after x.  No reset: as in the original flow the output register holds data
// only, and validity is tracked by the network around it.
//
// From the paper: table = L-LUT of the polynomial neuron, written as a ROM
// with a register at its output.  This design's own choices: the fixed-point
// convention, the clamp activation and the pseudo-random coefficients.
module polylut_neuron #(
  parameter int unsigned BETA_IN  = 3,
  parameter int unsigned BETA_OUT = 3,
  parameter int unsigned FANIN    = 4,
  parameter int unsigned DEGREE   = 6,
  parameter int unsigned SEED     = 32'h0000_0001
) (
  input  logic                         clk,
  input  logic [FANIN*BETA_IN-1:0]     x,
  output logic [BETA_OUT-1:0]          y
);
  import polylut_pkg::*;

  localparam int unsigned ADDR_W = FANIN * BETA_IN;
  localparam int unsigned DEPTH  = 2 ** ADDR_W;
  localparam int unsigned V      = 2 ** BETA_IN;   // values per input
  localparam int unsigned R      = DEGREE + 1;     // exponents per input
  localparam int unsigned RADIX  = (V > R) ? V : R;
  localparam int unsigned TSZ    = RADIX ** FANIN; // largest tensor
  localparam int unsigned SHIFT  = BETA_IN * DEGREE + WEIGHT_FRAC;
  localparam longint      YMAX   = longint'(2 ** BETA_OUT) - 1;

  logic [BETA_OUT-1:0] table_q [DEPTH];

  // The work tensors are packed vectors on purpose: elaboration-time
  // evaluators copy a variable on every element read, and a packed vector
  // copies as one block rather than element by element.
  initial begin : build_table
    automatic logic [TSZ-1:0][63:0] cur;
    automatic logic [TSZ-1:0][63:0] nxt;
    automatic longint      pw  [V][R];
    automatic int unsigned rem, deg, lo, hi;
    automatic longint      acc;

    for (int unsigned xv = 0; xv < V; xv++)
      for (int unsigned e = 0; e < R; e++)
        pw[xv][e] = ipow(longint'(xv), e);

    // Stage 0: coefficient tensor over exponents (base R digits).
    for (int unsigned fe = 0; fe < R ** FANIN; fe++) begin
      rem = fe;
      deg = 0;
      for (int unsigned j = 0; j < FANIN; j++) begin
        deg += rem % R;
        rem = rem / R;
      end
      if (deg <= DEGREE)
        cur[fe] = coef_weight(SEED, fe) * ipow(longint'(V), DEGREE - deg);
      else
        cur[fe] = 0;
    end

    // Stage k: digit k turns from an exponent into an input value.
    for (int unsigned k = 0; k < FANIN; k++) begin
      lo = V ** k;
      hi = R ** (FANIN - k - 1);
      for (int unsigned h = 0; h < hi; h++)
        for (int unsigned xv = 0; xv < V; xv++)
          for (int unsigned l = 0; l < lo; l++) begin
            acc = 0;
            for (int unsigned e = 0; e < R; e++)
              acc += longint'(cur[l + lo * (e + R * h)]) * pw[xv][e];
            nxt[l + lo * (xv + V * h)] = acc;
          end
      cur = nxt;
    end

    // Activation: floor to output LSBs, ReLU and saturation.
    for (int unsigned a = 0; a < DEPTH; a++) begin
      acc = longint'(cur[a]) >>> SHIFT;
      if (acc < 0) acc = 0;
      if (acc > YMAX) acc = YMAX;
      table_q[a] = acc[BETA_OUT-1:0];
    end
  end

  always_ff @(posedge clk) y <= table_q[x];

endmodule
