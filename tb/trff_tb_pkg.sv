// trff_tb_pkg: operating point of the random flip-flop generator, for testbenches.
//
// The generator was characterised with a 20 MHz bit clock and SPAD pixels
// detecting 45 million photons per second each, with a dead time of about
// 6 ns. These values set the clock and the detector models in the testbenches.
package trff_tb_pkg;

  localparam int unsigned F_BIT_HZ     = 20_000_000; // bit sampling rate
  localparam int unsigned F_DET_CPS    = 45_000_000; // photon detection rate per SPAD
  localparam int unsigned DEAD_TIME_PS = 6_000;      // SPAD dead time, about 6 ns

  // Serial autocorrelation coefficient of lag k of a bit stream:
  // a_k = sum_{i<N-k} (x_i - m)(x_{i+k} - m) / sum_{i<N-k} (x_i - m)^2.
  function automatic real autocorr(const ref bit bits[], input int k);
    real m, num, den;
    int n;
    n = bits.size();
    m = 0.0;
    foreach (bits[i]) m += real'(bits[i]);
    m = m / real'(n);
    num = 0.0; den = 0.0;
    for (int i = 0; i < n - k; i++) begin
      num += (real'(bits[i]) - m) * (real'(bits[i + k]) - m);
      den += (real'(bits[i]) - m) * (real'(bits[i]) - m);
    end
    return (den > 0.0) ? num / den : 0.0;
  endfunction

  // Bias b = (number of ones / N) - 1/2.
  function automatic real bias(const ref bit bits[]);
    real m;
    m = 0.0;
    foreach (bits[i]) m += real'(bits[i]);
    return m / real'(bits.size()) - 0.5;
  endfunction

endpackage
