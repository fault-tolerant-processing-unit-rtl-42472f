// gdswu_pkg -- constants and elaboration-time functions shared by the
// gamma-distribution sliding window unit (GDSWU) and its wrappers.
//
// The window weights come from the gamma probability density
//     f(x; a, b) = x^(a-1) * exp(-x/b) / (b^a * (a-1)!)
// evaluated at the age x = 1 .. TAPS of each stored sample (x = 1 is the
// newest).  The hardware stores the weight as an unsigned fixed-point number
// with WEIGHT_FRAC fraction bits, scaled by b so that it stays below one:
//     W(x) = floor( 2^WEIGHT_FRAC * b * f(x; a, b) )
//          = floor( 2^WEIGHT_FRAC * (x/b)^(a-1) * exp(-x/b) / (a-1)! )
// For a = 1, b = 10 this is floor(32 * exp(-x/10)):
//     28 26 23 21 19 17 15 14 13 11 10 9 8 7 7 6   (sum 234)
// The density and a = 1, b = 10 follow the paper; the scaling by b, the
// truncation and the 5 fraction bits are this design's choice, picked because
// they give the paper's reported step response (input 7'h7F -> 7'h3A).
// The functions are evaluated only at elaboration; nothing here is hardware.
package gdswu_pkg;

  // Defaults of the design: the paper's main configuration.
  localparam int unsigned GDSWU_TAPS        = 16;  // window length (paper)
  localparam int unsigned GDSWU_DATA_W      = 7;   // sample / result width (paper, Fig. 2)
  localparam int unsigned GDSWU_GAMMA_A     = 1;   // gamma shape a (paper)
  localparam int unsigned GDSWU_GAMMA_B     = 10;  // gamma scale b (paper)
  localparam int unsigned GDSWU_WEIGHT_FRAC = 5;   // weight fraction bits (own choice)

  // exp(-t) for t >= 0: exp(t) by its Taylor series after halving t until it
  // is below 1, then squaring back; the reciprocal gives exp(-t).
  function automatic real exp_neg(input real t);
    real    r, term, s;
    int     halvings;
    r        = t;
    halvings = 0;
    while (r > 1.0) begin
      r        = r / 2.0;
      halvings = halvings + 1;
    end
    s    = 1.0;
    term = 1.0;
    for (int k = 1; k < 30; k++) begin
      term = term * r / k;
      s    = s + term;
    end
    for (int h = 0; h < halvings; h++) s = s * s;
    return 1.0 / s;
  endfunction

  // Fixed-point window weight of a sample of age x (x >= 1).
  function automatic int unsigned gamma_weight(input int unsigned x,
                                               input int unsigned a,
                                               input int unsigned b,
                                               input int unsigned frac);
    real t, v;
    t = real'(x) / real'(b);
    v = exp_neg(t);
    for (int k = 1; k < a; k++) v = v * t / k;   // (x/b)^(a-1) / (a-1)!
    v = v * (2.0 ** frac);
    return $rtoi(v);                              // truncation (v >= 0)
  endfunction

  // Width of the full-precision weighted sum of `taps` products.
  function automatic int unsigned sum_width(input int unsigned data_w,
                                            input int unsigned frac,
                                            input int unsigned taps);
    return data_w + frac + $clog2(taps);
  endfunction

endpackage
