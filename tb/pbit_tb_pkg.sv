// Testbench helpers: calibration of the bias-to-threshold table for the
// behavioural source (sdi_source_model), whose difference samples are the
// sum of four independent uniform integers in 0..63.
//
// For every table input x (signed 8 bit) the wanted probability of +1 is
// p(x) = (1 + tanh(x / X_SCALE)) / 2, and the threshold is the c in
// -1..255 whose P(j <= c) is closest to p(x).
package pbit_tb_pkg;
  localparam real X_SCALE = 16.0;

  // P(j <= c) for the behavioural source, c = -1..255 at index c+1
  function automatic void source_cdf(output real cdf [257]);
    longint pmf [256];
    longint tot;
    for (int j = 0; j < 256; j++) pmf[j] = 0;
    for (int a = 0; a < 64; a++)
      for (int b = 0; b < 64; b++)
        for (int c = 0; c < 64; c++)
          for (int d = 0; d < 64; d++) pmf[a + b + c + d]++;
    tot = 0;
    cdf[0] = 0.0;
    for (int j = 0; j < 256; j++) begin
      tot += pmf[j];
      cdf[j + 1] = real'(tot) / real'(64 * 64 * 64 * 64);
    end
  endfunction

  function automatic real p_plus(int x);
    return (1.0 + $tanh(real'(x) / X_SCALE)) / 2.0;
  endfunction

  // threshold table entry for signed input x
  function automatic int threshold_for(int x, const ref real cdf [257]);
    int best;
    real p, err, best_err;
    p = p_plus(x);
    best = -1;
    best_err = 2.0;
    for (int c = -1; c < 256; c++) begin
      err = (cdf[c + 1] > p) ? cdf[c + 1] - p : p - cdf[c + 1];
      if (err < best_err) begin
        best_err = err;
        best = c;
      end
    end
    return best;
  endfunction

  // probability of +1 that threshold c actually gives
  function automatic real p_of_thr(int c, const ref real cdf [257]);
    return cdf[c + 1];
  endfunction
endpackage
