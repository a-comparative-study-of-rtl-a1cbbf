// fb_ref_pkg: reference models used by the testbenches, written separately
// from the RTL.  They recompute, in floating point, the DDS samples and the
// quantized band-pass coefficients from their definitions:
//   sine[k]  = round(127 * sin(2*pi*k/256))
//   c[n]     = round(g * w[n] * h[n - (N-1)/2]),
//   h[m]     = 2*f2*sinc(2*f2*m) - 2*f1*sinc(2*f1*m),  sinc(x) = sin(pi x)/(pi x)
//   w        = triangular (Mel) or 0.54 - 0.46 cos(2 pi n/(N-1)) (Bark)
//   g        = min(32767 / max|w h|, ((2^25 - 1)/128 - N) / sum|w h|)
// Only the band cut-off tables are taken from fb_pkg.
package fb_ref_pkg;

  localparam real RPI = 3.14159265358979323846;

  function automatic int rnd(real x);
    return (x >= 0.0) ? $rtoi(x + 0.5) : -$rtoi(-x + 0.5);
  endfunction

  function automatic int ref_sine(int k);
    return rnd(127.0 * $sin(2.0 * RPI * real'(k) / 256.0));
  endfunction

  function automatic real sinc(real x);
    if (x == 0.0) return 1.0;
    return $sin(RPI * x) / (RPI * x);
  endfunction

  function automatic real ref_win(bit bark, int n, int ntaps);
    real half;
    half = real'(ntaps - 1) / 2.0;
    if (bark) return 0.54 - 0.46 * $cos(2.0 * RPI * real'(n) / real'(ntaps - 1));
    if (real'(n) <= half) return real'(n) / half;
    return 2.0 - real'(n) / half;
  endfunction

  function automatic real ref_h(bit bark, int arch, int band, int n, int ntaps);
    real f1, f2, m;
    fb_pkg::bank_e b;
    b  = bark ? fb_pkg::BANK_BARK : fb_pkg::BANK_MEL;
    f1 = real'(fb_pkg::band_lo_hz(b, arch, band)) / 100000.0;
    f2 = real'(fb_pkg::band_hi_hz(b, arch, band)) / 100000.0;
    m  = real'(n) - real'(ntaps - 1) / 2.0;
    return ref_win(bark, n, ntaps) * (2.0 * f2 * sinc(2.0 * f2 * m) - 2.0 * f1 * sinc(2.0 * f1 * m));
  endfunction

  // Fill c[0..ntaps-1] with the quantized coefficients of one band.
  function automatic void ref_coefs(bit bark, int arch, int band, int ntaps, ref int c[]);
    real peak, sum, v, g1, g2, g;
    peak = 0.0; sum = 0.0;
    for (int n = 0; n < ntaps; n++) begin
      v = ref_h(bark, arch, band, n, ntaps);
      if (v < 0.0) v = -v;
      if (v > peak) peak = v;
      sum += v;
    end
    g1 = 32767.0 / peak;
    g2 = (33554431.0 / 128.0 - real'(ntaps)) / sum;
    g  = (g1 < g2) ? g1 : g2;
    c = new[ntaps];
    for (int n = 0; n < ntaps; n++) c[n] = rnd(g * ref_h(bark, arch, band, n, ntaps));
  endfunction

endpackage
