// tb_dwc_thermometer -- self-checking test of the thermometer encoder.
//
// Three encoders are swept over their sensor range: the default one (63 bits,
// 12-bit sensor, mu = 0, sigma = 1), a 63-bit one for a 16-bit sensor with a
// non-zero mean, and a 5-bit one (the smallest code of the bit-width study).
// The expected thresholds are computed here independently of the design: the
// Gaussian quantiles are found by bisection on Phi(x) = erfc(-x/sqrt2)/2
// (Numerical Recipes' erfc, relative error < 1.2e-7) rather than by the
// rational approximation the design uses. A mismatch is tolerated only where
// the exact threshold lies within 1e-3 LSB of an integer. Also checked: the
// middle threshold sits at the (folded) value 0 and the outer ones at +-10.
module tb_dwc_thermometer;

  int checks = 0, failures = 0;

  // ---------------- independent threshold model ----------------
  function automatic real erfc_nr(input real x);
    real z, t, ans;
    z = (x < 0.0) ? -x : x;
    t = 1.0 / (1.0 + 0.5 * z);
    ans = t * $exp(-z*z - 1.26551223 + t*(1.00002368 + t*(0.37409196 + t*(0.09678418 +
          t*(-0.18628806 + t*(0.27886187 + t*(-1.13520398 + t*(1.48851587 +
          t*(-0.82215223 + t*0.17087277)))))))));
    return (x >= 0.0) ? ans : 2.0 - ans;
  endfunction

  function automatic real phi(input real x);
    return 0.5 * erfc_nr(-x / $sqrt(2.0));
  endfunction

  function automatic real ppf_bisect(input real p);
    real lo, hi, mid;
    lo = -12.0; hi = 12.0;
    for (int it = 0; it < 90; it++) begin
      mid = 0.5 * (lo + hi);
      if (phi(mid) < p) lo = mid; else hi = mid;
    end
    return 0.5 * (lo + hi);
  endfunction

  // Quantile of threshold i: 1/B..(B-1)/B with 1/2 inserted in the middle.
  function automatic real quantile(input int i, input int b);
    if (i == (b - 1) / 2) return 0.5;
    if (i < (b - 1) / 2)  return real'(i + 1) / real'(b);
    return real'(i) / real'(b);
  endfunction

  // Exact (unfloored) threshold in LSB units.
  function automatic real thr_exact(input int i, input int b, input real mu,
                                    input real sigma, input real qs);
    real s;
    s = 10.0 / (-ppf_bisect(1.0 / real'(b)));
    return (s * ppf_bisect(quantile(i, b)) * sigma + mu) / qs;
  endfunction

  // ---------------- devices ----------------
  localparam real MU1 = 0.3, SIG1 = 1.7, QS1 = 1.2 * 9.0 / 32767.0;
  localparam real QS2 = 4.0 / 2047.0;

  logic signed [11:0] obs0;  logic [62:0] th0;
  logic signed [15:0] obs1;  logic [62:0] th1;
  logic signed [11:0] obs2;  logic [4:0]  th2;

  dwc_thermometer u0 (.obs(obs0), .therm(th0));
  dwc_thermometer #(.B(63), .B_OBS(16), .MU(MU1), .SIGMA(SIG1), .QS(QS1)) u1 (.obs(obs1), .therm(th1));
  dwc_thermometer #(.B(5), .B_OBS(12), .MU(-0.2), .SIGMA(0.8), .QS(QS2)) u2 (.obs(obs2), .therm(th2));

  real ex0 [63], ex1 [63], ex2 [5];

  function automatic real clipq(input real t, input int qmax);
    if (t > real'(qmax))  return real'(qmax);
    if (t < real'(-qmax)) return real'(-qmax);
    return t;
  endfunction

  // Compare one bit; tolerate only a threshold that is an integer to 1e-3.
  task automatic cmp_bit(input int obs, input real exact, input int qmax, input logic got,
                         input string tag, input int i);
    real t;
    logic want;
    t = clipq($floor(exact), qmax);
    want = (real'(obs) >= t);
    checks++;
    if (got !== want) begin
      if (($floor(exact + 1e-3) != $floor(exact - 1e-3)) && (real'(obs) == $floor(exact + 1e-3)
          || real'(obs) == $floor(exact - 1e-3))) begin
        // boundary case within numerical tolerance
      end else begin
        failures++;
        if (failures < 10) $display("FAIL %s obs=%0d bit %0d got %0b want %0b (thr %f)",
                                    tag, obs, i, got, want, exact);
      end
    end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 63; i++) ex0[i] = thr_exact(i, 63, 0.0, 1.0, 6.0 / 2047.0);
    for (int i = 0; i < 63; i++) ex1[i] = thr_exact(i, 63, MU1, SIG1, QS1);
    for (int i = 0; i < 5;  i++) ex2[i] = thr_exact(i, 5, -0.2, 0.8, QS2);

    // Structure of the default code: -10 / 0 / +10 landmarks, monotone.
    checks++;
    if ($floor(ex0[31] + 0.5) != 0.0) begin failures++; $display("FAIL middle threshold"); end
    checks++;
    if ($floor(ex0[0] * (6.0 / 2047.0) - 1e-6 + 0.5) != -10.0 ||
        $floor(ex0[62] * (6.0 / 2047.0) + 0.5) != 10.0) begin
      failures++; $display("FAIL outer thresholds %f %f", ex0[0], ex0[62]);
    end

    // Sweep the 12-bit default encoder over its whole range.
    for (int v = -2047; v <= 2047; v++) begin
      obs0 = 12'(v);
      #1;
      for (int i = 0; i < 63; i++) cmp_bit(v, ex0[i], 2047, th0[i], "u0", i);
      // thermometer property: ones form a prefix of the low bits
      checks++;
      if (((th0 + 63'd1) & th0) != 63'd0) begin failures++; $display("FAIL not a thermometer code %h", th0); end
    end

    // Mid-threshold landmark: a reading of 0 sets exactly the lower half.
    obs0 = 0; #1;
    checks++;
    if (th0 !== {32'd0, {31{1'b1}}} && th0 !== {31'd0, {32{1'b1}}}) begin
      failures++; $display("FAIL zero reading %b", th0);
    end

    // Sweep the 16-bit encoder (stride 5 plus the ends).
    for (int v = -32767; v <= 32767; v += 5) begin
      obs1 = 16'(v);
      #1;
      for (int i = 0; i < 63; i++) cmp_bit(v, ex1[i], 32767, th1[i], "u1", i);
    end

    // Sweep the 5-bit encoder.
    for (int v = -2047; v <= 2047; v++) begin
      obs2 = 12'(v);
      #1;
      for (int i = 0; i < 5; i++) cmp_bit(v, ex2[i], 2047, th2[i], "u2", i);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
