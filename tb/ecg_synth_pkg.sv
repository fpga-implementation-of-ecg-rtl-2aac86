// ecg_synth_pkg: synthetic ECG for the testbenches, about 1000 LSB per mV,
// shapes given for 200 samples/s and stretched for other rates. Each beat is a sum of Gaussian bumps placed around its R
// time r (in samples): P (0.15 mV, r-40), Q (-0.1 mV, r-4), R (1.2 mV, r),
// S (-0.25 mV, r+4), T (0.3 mV, r+60). A 0.25 Hz baseline wander of 0.2 mV
// is added. An optional artifact is a sharp 1.5 mV spike at a given time.
package ecg_synth_pkg;
  function automatic real gauss(real t, real mu, real sigma, real amp);
    return amp * $exp(-((t - mu) * (t - mu)) / (2.0 * sigma * sigma));
  endfunction

  // sc: sample rate / 200, stretches every time constant
  function automatic real beat(real t, real r, real sc);
    real v = 0.0;
    if (t < r - 120.0 * sc || t > r + 150.0 * sc) return 0.0;
    v += gauss(t, r - 40.0 * sc, 5.0 * sc, 150.0);
    v += gauss(t, r - 4.0 * sc, 1.5 * sc, -100.0);
    v += gauss(t, r, 2.0 * sc, 1200.0);
    v += gauss(t, r + 4.0 * sc, 1.5 * sc, -250.0);
    v += gauss(t, r + 60.0 * sc, 10.0 * sc, 300.0);
    return v;
  endfunction

  // n: sample index; rs: R times in samples; art: artifact time (<0: none);
  // fs: sample rate in samples/s (the shapes above are given for 200)
  function automatic logic signed [15:0] ecg_sample(int n, int rs[$], int art, int fs = 200);
    real sc = real'(fs) / 200.0;
    real v = 200.0 * $sin(2.0 * 3.14159265 * 0.25 * n / real'(fs));
    foreach (rs[i]) v += beat(real'(n), real'(rs[i]), sc);
    if (art >= 0) v += gauss(real'(n), real'(art), sc, 1500.0);
    return 16'($rtoi(v));
  endfunction
endpackage
