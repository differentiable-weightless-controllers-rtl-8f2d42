// dwc_pkg -- constants and elaboration-time functions shared by the
// weightless-controller modules.
//
// Everything in here is evaluated while the design elaborates; none of it
// becomes logic by itself. It provides:
//
//  * norm_ppf / therm_tau: the thermometer thresholds. For an odd number of
//    bits B the normalised thresholds sit at stretched Gaussian quantiles
//    q = 1/B, 2/B, ..., (B-1)/B plus an extra quantile 1/2, stretched by
//    s = 10/|PhiInv(1/B)| so the outermost thresholds land on -10 and +10 and
//    the middle one on 0. This is the construction the method prescribes.
//    PhiInv is computed with Acklam's rational approximation (relative error
//    about 1e-9), a choice of this implementation.
//  * therm_threshold: folds the frozen normalisation statistics (mu, sigma)
//    and the sensor quantisation scale Qs into an integer threshold,
//        tau* = clip(floor((tau*sigma + mu)/Qs), -Qmax, Qmax),
//    exactly the integer-comparison form used for end-to-end deployment.
//  * lut_conn / lut_table: the learned parameters of the LUT network (the
//    interconnect and the 2^k-entry truth tables). A trained model is not
//    part of this source, so these functions return a deterministic
//    pseudo-random network derived from a seed with a 32-bit integer hash.
//    To deploy a trained controller, replace the bodies of these two
//    functions (for instance with case tables produced by the training
//    flow); no module needs to change.
//  * obs_mu / obs_sigma / obs_qs: per-channel normalisation statistics and
//    quantisation scales. Again placeholders derived from the seed, standing
//    in for the frozen running statistics of a trained model.
package dwc_pkg;

  // Largest supported LUT arity: truth tables are held in 64-bit words.
  localparam int unsigned K_MAX = 6;

  // ---------------------------------------------------------------------
  // Inverse standard-normal CDF (Acklam's approximation).
  // ---------------------------------------------------------------------
  function automatic real norm_ppf(input real p);
    real q, r, num, den;
    real p_low;
    p_low = 0.02425;
    if (p < p_low) begin
      q   = $sqrt(-2.0 * $ln(p));
      num = (((((-7.784894002430293e-03 * q - 3.223964580411365e-01) * q
              - 2.400758277161838e+00) * q - 2.549732539343734e+00) * q
              + 4.374664141464968e+00) * q + 2.938163982698783e+00);
      den = ((((7.784695709041462e-03 * q + 3.224671290700398e-01) * q
              + 2.445134137142996e+00) * q + 3.754408661907416e+00) * q + 1.0);
      return num / den;
    end else if (p > 1.0 - p_low) begin
      q   = $sqrt(-2.0 * $ln(1.0 - p));
      num = (((((-7.784894002430293e-03 * q - 3.223964580411365e-01) * q
              - 2.400758277161838e+00) * q - 2.549732539343734e+00) * q
              + 4.374664141464968e+00) * q + 2.938163982698783e+00);
      den = ((((7.784695709041462e-03 * q + 3.224671290700398e-01) * q
              + 2.445134137142996e+00) * q + 3.754408661907416e+00) * q + 1.0);
      return -num / den;
    end else begin
      q   = p - 0.5;
      r   = q * q;
      num = (((((-3.969683028665376e+01 * r + 2.209460984245205e+02) * r
              - 2.759285104469687e+02) * r + 1.383577518672690e+02) * r
              - 3.066479806614716e+01) * r + 2.506628277459239e+00) * q;
      den = (((((-5.447609879822406e+01 * r + 1.615858368580409e+02) * r
              - 1.556989798598866e+02) * r + 6.680131188771720e+01) * r
              - 1.328068155305180e+01) * r + 1.0);
      return num / den;
    end
  endfunction

  // Normalised threshold number i (0 = lowest) of a B-bit thermometer code,
  // B odd. Index (B-1)/2 is the inserted threshold at 0.
  function automatic real therm_tau(input int i, input int b);
    int  half;
    real q, s;
    half = (b - 1) / 2;
    if (i == half) return 0.0;
    if (i < half) q = real'(i + 1) / real'(b);
    else          q = real'(i) / real'(b);
    s = 10.0 / (-norm_ppf(1.0 / real'(b)));
    return s * norm_ppf(q);
  endfunction

  // Integer threshold for one sensor channel.
  function automatic int therm_threshold(input int i, input int b,
                                         input real mu, input real sigma,
                                         input real qs, input int qmax);
    real t;
    int  ti;
    t  = $floor((therm_tau(i, b) * sigma + mu) / qs);
    if (t > real'(qmax))  return qmax;
    if (t < real'(-qmax)) return -qmax;
    ti = int'(t);
    return ti;
  endfunction

  // ---------------------------------------------------------------------
  // Deterministic network parameters.
  // ---------------------------------------------------------------------
  // 32-bit integer mixing function ("lowbias32").
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic logic [31:0] key(input int unsigned seed, input int unsigned layer,
                                      input int unsigned idx, input int unsigned sub);
    return mix32(mix32(mix32(seed ^ (layer * 32'h9e3779b9)) ^ idx) ^ sub);
  endfunction

  // Index of the previous-layer bit wired to input `port` of LUT `lut`.
  function automatic int unsigned lut_conn(input int unsigned seed, input int unsigned layer,
                                           input int unsigned lut, input int unsigned port,
                                           input int unsigned n_in);
    return key(seed, layer, lut, port) % n_in;
  endfunction

  // Truth table of LUT `lut` in `layer`: bit a is the output for address a.
  function automatic logic [63:0] lut_table(input int unsigned seed, input int unsigned layer,
                                            input int unsigned lut);
    return {key(seed, layer, lut, 32'h100), key(seed, layer, lut, 32'h101)};
  endfunction

  // Uniform number in [0,1) from the hash, for the placeholder statistics.
  function automatic real unit_rand(input int unsigned seed, input int unsigned chan,
                                    input int unsigned sub);
    return real'(key(seed, 32'hff, chan, sub) >> 8) / 16777216.0;
  endfunction

  // Frozen running standard deviation of channel `chan` (sensor units).
  function automatic real obs_sigma(input int unsigned seed, input int unsigned chan);
    return 0.5 + 1.5 * unit_rand(seed, chan, 1);
  endfunction

  // Frozen running mean of channel `chan` (sensor units).
  function automatic real obs_mu(input int unsigned seed, input int unsigned chan);
    return (unit_rand(seed, chan, 2) - 0.5) * obs_sigma(seed, chan);
  endfunction

  // Quantisation scale Qs = x_max/Qmax with x_max 1.2 times the largest
  // magnitude expected on the channel (taken here as |mu| + 5 sigma).
  function automatic real obs_qs(input int unsigned seed, input int unsigned chan,
                                 input int qmax);
    real m;
    m = obs_mu(seed, chan);
    if (m < 0.0) m = -m;
    return 1.2 * (m + 5.0 * obs_sigma(seed, chan)) / real'(qmax);
  endfunction

endpackage
