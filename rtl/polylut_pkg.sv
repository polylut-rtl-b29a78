// polylut_pkg: shared constants and functions of the PolyLUT network RTL.
//
// A PolyLUT neuron is a logical LUT (L-LUT): a read-only table addressed by
// the concatenation of its F quantized inputs, holding the neuron's whole
// function phi[ sum_i w_i * m_i(x) ], where m_i runs over every monomial of
// degree at most D in the F inputs (constant term = bias) and phi is the
// folded batch-norm + quantized ReLU activation.  This package holds what
// both the RTL and the testbenches need to agree on:
//
//   * the coefficient generator coef_weight(): the trained coefficients of
//     the original flow are not available, so every coefficient is a fixed
//     pseudo-random signed integer derived from a per-neuron seed.  They are
//     stand-ins for trained weights and can be replaced without touching the
//     datapath.
//   * the fixed sparse connectivity pick_inputs(): each neuron reads F
//     distinct outputs of the previous layer, chosen once, a priori, by a
//     seeded pseudo-random draw (a random sparse graph, the usual practical
//     stand-in for an expander graph).
//   * number helpers (binomial coefficient, integer power).
//
// Fixed-point convention (this design's choice): an input code x of BI bits
// stands for u = x / 2^BI in [0,1).  A coefficient w is an integer in units
// of 2^-WEIGHT_FRAC output LSBs.  The neuron output is
//   y = clamp( floor( sum_e w_e * prod_j u_j^e_j / 2^WEIGHT_FRAC ), 0, 2^BO-1 )
// i.e. a ReLU followed by a uniform BO-bit quantizer, with the batch-norm
// scale and shift folded into the coefficients.
package polylut_pkg;

  // Coefficient format: signed WEIGHT_BITS-bit integers, WEIGHT_FRAC of them
  // fractional (in output-LSB units).
  localparam int unsigned WEIGHT_BITS = 8;
  localparam int unsigned WEIGHT_FRAC = 4;

  // Largest fan-in any layer may use (size of the index arrays below).
  localparam int unsigned MAX_FANIN = 8;

  // Largest number of layers a network may have.
  localparam int unsigned MAX_LAYERS = 8;

  typedef int unsigned idx_arr_t [MAX_FANIN];

  // 32-bit integer mixer (xorshift-multiply avalanche).
  function automatic int unsigned mix32(input int unsigned a);
    int unsigned h;
    h = a;
    h = h ^ (h >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic int unsigned hash3(input int unsigned seed, input int unsigned a,
                                        input int unsigned b);
    return mix32(mix32(mix32(seed ^ 32'h9e3779b9) ^ a) + b);
  endfunction

  // Seed of neuron n of layer l, given the network seed.
  function automatic int unsigned neuron_seed(input int unsigned net_seed, input int unsigned l,
                                              input int unsigned n);
    return hash3(net_seed, l + 32'h100, n);
  endfunction

  // Coefficient of the monomial whose exponents, written as a base-(D+1)
  // number with input 0 as least significant digit, equal flat_e.
  // Result is a signed integer in [-2^(WEIGHT_BITS-1), 2^(WEIGHT_BITS-1)-1].
  function automatic longint coef_weight(input int unsigned seed, input int unsigned flat_e);
    logic [WEIGHT_BITS-1:0] w;
    w = WEIGHT_BITS'(hash3(seed, 32'h5eed_c0ef, flat_e));
    return longint'($signed(w));
  endfunction

  function automatic longint ipow(input longint b, input int unsigned e);
    longint r;
    r = 1;
    for (int unsigned i = 0; i < e; i++) r = r * b;
    return r;
  endfunction

  function automatic int unsigned binom(input int unsigned n, input int unsigned k);
    longint r;
    r = 1;
    for (int unsigned i = 1; i <= k; i++)
      r = (r * (longint'(n) - longint'(k) + longint'(i))) / longint'(i);
    return int'(r);
  endfunction

  // F distinct indices in [0, n_in) for one neuron: a seeded draw without
  // replacement (rejection of repeats).  Entries at and above f are 0.
  function automatic idx_arr_t pick_inputs(input int unsigned seed, input int unsigned n_in,
                                           input int unsigned f);
    idx_arr_t r;
    int unsigned cand;
    int unsigned attempt;
    bit dup;
    for (int unsigned j = 0; j < MAX_FANIN; j++) r[j] = 0;
    for (int unsigned j = 0; j < f; j++) begin
      attempt = 0;
      do begin
        cand = hash3(seed, 32'hc011 + j, attempt) % n_in;
        dup = 1'b0;
        for (int unsigned k = 0; k < j; k++) if (r[k] == cand) dup = 1'b1;
        attempt++;
      end while (dup && attempt < 1000);
      r[j] = cand;
    end
    return r;
  endfunction

endpackage
