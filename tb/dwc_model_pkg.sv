// dwc_model_pkg -- bit-exact behavioural reference of the weightless controller,
// used by the testbenches.
//
// It evaluates the controller the way the method defines it, one step at a
// time on plain dynamic arrays: thermometer encoding with per-channel integer
// thresholds, LUT layers (address bit p = the bit wired to LUT input p), group
// popcounts over contiguous groups of the padded last layer, and the action
// head alpha*(s/|G| - 1/2) + beta followed by tanh and scaling to a signed
// actuator word. The network parameters (interconnect, truth tables,
// normalisation statistics) are read from dwc_pkg, which defines the network;
// the evaluation itself shares no code with the RTL.
package dwc_model_pkg;
  import dwc_pkg::*;

  // Integer thresholds of all channels, thr[j*b + i].
  function automatic void thresholds(input int unsigned d_in, input int unsigned b,
                                     input int unsigned b_obs, input int unsigned seed,
                                     output int thr[]);
    int qmax;
    qmax = (1 << (b_obs - 1)) - 1;
    thr = new[d_in * b];
    for (int unsigned j = 0; j < d_in; j++)
      for (int unsigned i = 0; i < b; i++)
        thr[j*b + i] = therm_threshold(int'(i), int'(b), obs_mu(seed, j), obs_sigma(seed, j),
                                       obs_qs(seed, j, qmax), qmax);
  endfunction

  function automatic void encode(input int obs[], input int thr[], input int unsigned b,
                                 output bit b0[]);
    b0 = new[obs.size() * b];
    for (int j = 0; j < obs.size(); j++)
      for (int unsigned i = 0; i < b; i++)
        b0[j*b + i] = (obs[j] >= thr[j*b + i]);
  endfunction

  function automatic void eval_layer(input int unsigned seed, input int unsigned layer,
                                     input int unsigned k, input int unsigned n_out,
                                     input bit x[], output bit y[]);
    logic [63:0] t;
    int unsigned a;
    y = new[n_out];
    for (int unsigned i = 0; i < n_out; i++) begin
      t = lut_table(seed, layer, i);
      a = 0;
      for (int unsigned p = 0; p < k; p++)
        if (x[lut_conn(seed, layer, i, p, x.size())]) a += (1 << p);
      y[i] = t[a];
    end
  endfunction

  // Group size of the padded last layer.
  function automatic int unsigned group_size(input int unsigned d_l, input int unsigned d_act);
    return (d_l + d_act - 1) / d_act;
  endfunction

  // Runs the LUT layers; returns the group sums and the last layer's bits.
  function automatic void eval_core(input int unsigned seed, input int unsigned n_layers,
                                    input int unsigned k, input int unsigned d_l,
                                    input int unsigned d_act, input bit b0[],
                                    output int sums[], output bit last[]);
    bit cur[], nxt[];
    int unsigned g;
    g = group_size(d_l, d_act);
    cur = b0;
    for (int unsigned l = 1; l <= n_layers; l++) begin
      eval_layer(seed, l, k, (l == n_layers) ? g * d_act : d_l, cur, nxt);
      cur = nxt;
    end
    last = cur;
    sums = new[d_act];
    for (int unsigned d = 0; d < d_act; d++) begin
      sums[d] = 0;
      for (int unsigned m = 0; m < g; m++) sums[d] += int'(cur[d*g + m]);
    end
  endfunction

  // Action word for popcount s of head d: tanh(alpha*(s/G - 1/2) + beta),
  // scaled to a signed w-bit word and rounded.
  function automatic int action_word(input int unsigned d, input int s, input int unsigned g,
                                     input int unsigned w);
    real alpha, beta, a;
    alpha = 1.5 + 0.25 * real'(d % 7);
    beta  = 0.1 * real'(int'(d % 5) - 2);
    a = $tanh(alpha * (real'(s) / real'(g) - 0.5) + beta);
    return int'(a * real'((1 << (w - 1)) - 1));
  endfunction

endpackage
