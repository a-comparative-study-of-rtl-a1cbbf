// fb_pkg: constants, types and design-time helper functions shared by the
// Mel / Bark filter bank.
//
// The bank is thirteen linear-phase band-pass FIR filters whose outputs are
// summed.  The Mel bank windows its ideal band-pass impulse responses with a
// Bartlett (triangular) window, the Bark bank with a Hamming window.  The six
// band tables below (three "architectures" per bank) are the cut-off
// frequencies the design is specified with; they are printed with a "KHz"
// heading in the original specification but only make sense as Hz next to the
// 0.1 MHz input sampling rate, so they are used as Hz here.
//
// Everything numeric that is fixed by the specification: 13 bands, 201 taps,
// 8-bit input, 30-bit final sum, 50 MHz clock, 0.1 MHz sample rate.  Own
// choices: 16-bit coefficients, 26-bit filter outputs (so that the four adder
// levels grow them to exactly 30 bits), and the quantization rule in
// coef_scale() that makes a filter output impossible to overflow.
package fb_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int N_BANDS       = 13;          // thirteen band-pass filters
  localparam int N_TAPS        = 201;         // coefficients per filter
  localparam int DIN_W         = 8;           // sine / filter input width
  localparam int COEF_W        = 16;          // quantized coefficient width
  localparam int FIR_OUT_W     = 26;          // one filter output
  localparam int SUM_W         = FIR_OUT_W + 4; // 30-bit final sum
  localparam int CLK_HZ        = 50_000_000;  // system clock
  localparam int FS_HZ         = 100_000;     // input sample rate
  localparam int SAMPLE_PERIOD = CLK_HZ / FS_HZ; // 500 clocks per sample
  localparam int SINE_HZ       = 1_000;       // default test tone
  localparam int PHASE_W       = 32;          // DDS phase accumulator

  localparam real PI = 3.14159265358979323846;

  typedef enum logic {BANK_MEL = 1'b0, BANK_BARK = 1'b1} bank_e;

  // DDS tuning word for a tone of f_hz when the accumulator steps at fs_hz.
  function automatic logic [PHASE_W-1:0] tuning_word(int f_hz, int fs_hz);
    real t;
    t = (real'(f_hz) / real'(fs_hz)) * 4294967296.0;
    return PHASE_W'(longint'(t + 0.5));
  endfunction

  // ------------------------------------------------------------ band tables
  // [architecture 1..3][band 1..13], cut-offs in Hz.
  typedef int band_tab_t [3][N_BANDS];

  localparam band_tab_t MEL_LO = '{
    '{  50,  250,  450,  650,  850, 1058, 1350, 1742, 2256, 2948, 3750, 4692,  5960},
    '{ 150,  250,  350,  450,  550,  665,  820, 1055, 1410, 1906, 2600, 3545,  3840},
    '{  10,   60,  110,  160,  210,  340,  670, 1310, 2300, 3840, 5980, 6810,  7440}};
  localparam band_tab_t MEL_HI = '{
    '{ 250,  450,  650,  850, 1062, 1358, 1750, 2262, 2956, 3758, 4700, 5962,  7625},
    '{ 250,  350,  450,  550,  670,  825, 1060, 1415, 1910, 2606, 3550, 3845,  5490},
    '{  60,  110,  160,  210,  360,  690, 1320, 2360, 3850, 5990, 6830, 7460, 11990}};
  localparam band_tab_t BARK_LO = '{
    '{  50,  200,  350,  500,  650,  900, 1300, 1900, 2750, 3900, 5400, 7400,  9900},
    '{ 150,  250,  350,  450,  550,  700,  900, 1200, 1650, 2300, 3100, 4200,  5650},
    '{  10,   60,  110,  160,  210,  360,  710, 1360, 2410, 3960, 6110, 8960, 12610}};
  localparam band_tab_t BARK_HI = '{
    '{ 200,  350,  500,  650,  900, 1300, 1900, 2750, 3900, 5400, 7400, 9900, 12900},
    '{ 250,  350,  450,  550,  700,  900, 1200, 1650, 2300, 3100, 4200, 5650,  7500},
    '{  60,  110,  160,  210,  360,  710, 1360, 2410, 3960, 6110, 8960,12610, 16010}};

  // Lower / upper cut-off in Hz of band (1..13) of architecture (1..3).
  function automatic int band_lo_hz(bank_e bank, int arch, int band);
    return (bank == BANK_MEL) ? MEL_LO[arch-1][band-1] : BARK_LO[arch-1][band-1];
  endfunction
  function automatic int band_hi_hz(bank_e bank, int arch, int band);
    return (bank == BANK_MEL) ? MEL_HI[arch-1][band-1] : BARK_HI[arch-1][band-1];
  endfunction

  // ------------------------------------------------- coefficient design
  // Window value at tap n of an n_taps-long filter: Bartlett (zero at both
  // ends) for the Mel bank, Hamming for the Bark bank.
  function automatic real window(bank_e bank, int n, int n_taps);
    real x;
    x = real'(n) / real'(n_taps - 1);
    if (bank == BANK_MEL) return 1.0 - ((2.0 * x - 1.0) < 0.0 ? (1.0 - 2.0 * x) : (2.0 * x - 1.0));
    else                  return 0.54 - 0.46 * $cos(2.0 * PI * x);
  endfunction

  // Ideal (unwindowed) band-pass impulse response at offset m from the centre
  // tap, for cut-offs f1 < f2 given as fractions of the sample rate.
  function automatic real ideal_bp(real f1, real f2, int m);
    if (m == 0) return 2.0 * (f2 - f1);
    return ($sin(2.0 * PI * f2 * m) - $sin(2.0 * PI * f1 * m)) / (PI * m);
  endfunction

  // Real-valued windowed coefficient at tap n.
  function automatic real coef_real(bank_e bank, int arch, int band, int n, int n_taps);
    real f1, f2;
    f1 = real'(band_lo_hz(bank, arch, band)) / real'(FS_HZ);
    f2 = real'(band_hi_hz(bank, arch, band)) / real'(FS_HZ);
    return window(bank, n, n_taps) * ideal_bp(f1, f2, n - (n_taps - 1) / 2);
  endfunction

  // Quantization gain: as large as possible while (a) the largest coefficient
  // fits COEF_W signed bits and (b) sum|c| * 2^(DIN_W-1) stays below
  // 2^(FIR_OUT_W-1) even after rounding, so no input can overflow a filter.
  function automatic real coef_scale(bank_e bank, int arch, int band, int n_taps);
    real c, peak, sum, s1, s2;
    peak = 0.0; sum = 0.0;
    for (int n = 0; n < n_taps; n++) begin
      c = coef_real(bank, arch, band, n, n_taps);
      if (c < 0.0) c = -c;
      if (c > peak) peak = c;
      sum += c;
    end
    s1 = (real'(2 ** (COEF_W - 1)) - 1.0) / peak;
    s2 = ((real'(2 ** (FIR_OUT_W - 1)) - 1.0) / real'(2 ** (DIN_W - 1)) - real'(n_taps)) / sum;
    return (s1 < s2) ? s1 : s2;
  endfunction

  // Round half away from zero.
  function automatic int round_int(real x);
    return (x >= 0.0) ? int'($floor(x + 0.5)) : -int'($floor(-x + 0.5));
  endfunction

endpackage
