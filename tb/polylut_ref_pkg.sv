// polylut_ref_pkg: reference model of a PolyLUT network for the testbenches.
//
// It evaluates every neuron the slow, direct way: for each exponent tuple
// (e_0..e_{F-1}) with e_0 + .. + e_{F-1} <= D it adds
//     w_e * 2^(B*(D-|e|)) * prod_j x_j^e_j
// and then applies the same floor / ReLU / saturation as the hardware.  It
// shares with the RTL only what defines the trained network (coefficient and
// mask generators of polylut_pkg), not the table construction, so a fault in
// the tensor evaluation, the addressing or the wiring shows up as a mismatch.
package polylut_ref_pkg;
  import polylut_pkg::*;

  // Neuron output for the table address addr (input j at [j*bi +: bi]).
  function automatic int unsigned neuron_ref(input int unsigned seed, input int unsigned bi,
                                             input int unsigned bo, input int unsigned f,
                                             input int unsigned d, input longint unsigned addr);
    longint sum, term, v, ymax;
    int unsigned r, ntup, rem, deg, e, xv;
    v    = longint'(1) << bi;
    r    = d + 1;
    ntup = 1;
    for (int unsigned j = 0; j < f; j++) ntup *= r;
    sum = 0;
    for (int unsigned t = 0; t < ntup; t++) begin
      rem  = t;
      deg  = 0;
      term = 1;
      for (int unsigned j = 0; j < f; j++) begin
        e   = rem % r;
        rem = rem / r;
        deg += e;
        xv  = int'((addr >> (j * bi)) & ((longint'(1) << bi) - 1));
        for (int unsigned k = 0; k < e; k++) term *= longint'(xv);
      end
      if (deg <= d) begin
        for (int unsigned k = deg; k < d; k++) term *= v;
        sum += coef_weight(seed, t) * term;
      end
    end
    sum  = sum >>> (bi * d + WEIGHT_FRAC);
    ymax = (longint'(1) << bo) - 1;
    if (sum < 0) sum = 0;
    if (sum > ymax) sum = ymax;
    return int'(sum);
  endfunction

  // Network description: the parameters of a polylut_net instance.
  typedef struct {
    int unsigned in_features;
    int unsigned num_layers;
    int unsigned layer_n [MAX_LAYERS];
    int unsigned beta0;
    int unsigned beta;
    int unsigned fanin0;
    int unsigned fanin;
    int unsigned degree;
    int unsigned net_seed;
  } net_cfg_t;

  // Whole-network reference: input codes in, last-layer codes out.  Also
  // counts the neuron outputs (all layers) that sit at 0 and at the top code.
  function automatic void net_ref(input net_cfg_t c, input int unsigned xin[],
                                  output int unsigned yout[],
                                  inout int unsigned n_zero, inout int unsigned n_sat);
    int unsigned prev[], cur[];
    int unsigned in_n, bi, f, s;
    idx_arr_t idx;
    longint unsigned a;
    prev = xin;
    in_n = c.in_features;
    for (int unsigned l = 0; l < c.num_layers; l++) begin
      bi  = (l == 0) ? c.beta0 : c.beta;
      f   = (l == 0) ? c.fanin0 : c.fanin;
      cur = new[c.layer_n[l]];
      for (int unsigned n = 0; n < c.layer_n[l]; n++) begin
        s   = neuron_seed(c.net_seed, l, n);
        idx = pick_inputs(s, in_n, f);
        a   = 0;
        for (int unsigned j = 0; j < f; j++) a |= longint'(prev[idx[j]]) << (j * bi);
        cur[n] = neuron_ref(s, bi, c.beta, f, c.degree, a);
        if (cur[n] == 0) n_zero++;
        if (cur[n] == (1 << c.beta) - 1) n_sat++;
      end
      prev = cur;
      in_n = c.layer_n[l];
    end
    yout = prev;
  endfunction

endpackage
