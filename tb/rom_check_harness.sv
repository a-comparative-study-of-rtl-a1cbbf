// rom_check_harness: reads every tap of one band_coef_rom and checks it
// against the reference coefficients of fb_ref_pkg (exact match), plus the
// properties the bank relies on: one clock of read latency, linear phase
// (c[n] = c[N-1-n]), 16-bit range, and sum|c| * 128 < 2^25 so a filter output
// fits 26 bits.  It also reports the gain at the band centre against the gain
// at a frequency far outside the band: the centre gain must be larger.
module rom_check_harness #(
  parameter bit BARK   = 1'b0,
  parameter int ARCH   = 1,
  parameter int BAND   = 1,
  parameter int N_TAPS = 201
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output bit   done
);
  localparam int AW = $clog2(N_TAPS);
  localparam fb_pkg::bank_e BK = BARK ? fb_pkg::BANK_BARK : fb_pkg::BANK_MEL;
  logic ce = 1'b1;
  logic [AW-1:0] addr = '0;
  logic signed [15:0] coef;
  int ref_c [];
  int got [N_TAPS];

  band_coef_rom #(.BANK(BK), .ARCH(ARCH), .BAND(BAND), .N_TAPS(N_TAPS)) dut (.clk, .ce, .addr, .coef);

  task automatic check(string what, longint got_v, longint exp_v);
    checks++;
    if (got_v != exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %m %s got %0d expected %0d", what, got_v, exp_v);
    end
  endtask

  function automatic real gain(real f_hz);
    real re = 0.0, im = 0.0;
    for (int n = 0; n < N_TAPS; n++) begin
      re += real'(got[n]) * $cos(2.0 * fb_ref_pkg::RPI * f_hz * n / 100000.0);
      im += real'(got[n]) * $sin(2.0 * fb_ref_pkg::RPI * f_hz * n / 100000.0);
    end
    return $sqrt(re * re + im * im);
  endfunction

  initial begin
    longint abs_sum;
    real fc, fs, gc, gs;
    int lo, hi;
    checks = 0; failures = 0; done = 0;
    fb_ref_pkg::ref_coefs(BARK, ARCH, BAND, N_TAPS, ref_c);
    for (int n = 0; n < N_TAPS; n++) begin
      addr = AW'(n);
      @(posedge clk); #1;
      // Address changed this edge? No: read happens on this edge.
      got[n] = int'(coef);
      check("coef", coef, ref_c[n]);
      // Hold ce low: output must not change.
      ce = 1'b0; addr = AW'((n + 7) % N_TAPS);
      @(posedge clk); #1;
      check("hold", coef, ref_c[n]);
      ce = 1'b1;
    end
    abs_sum = 0;
    for (int n = 0; n < N_TAPS; n++) begin
      check("symmetry", got[n], got[N_TAPS - 1 - n]);
      abs_sum += (got[n] < 0) ? -got[n] : got[n];
    end
    checks++;
    if (abs_sum * 128 >= (longint'(1) << 25)) begin failures++; $display("FAIL %m bound %0d", abs_sum); end
    lo = fb_pkg::band_lo_hz(BK, ARCH, BAND);
    hi = fb_pkg::band_hi_hz(BK, ARCH, BAND);
    fc = (real'(lo) + real'(hi)) / 2.0;
    fs = (fc < 25000.0) ? fc + 25000.0 : fc - 25000.0;
    gc = gain(fc); gs = gain(fs);
    checks++;
    if (!(gc > gs)) begin failures++; $display("FAIL %m centre gain %f not above stop gain %f", gc, gs); end
    $display("%s arch %0d band %0d (%0d-%0d Hz): |H(centre)|=%0.0f |H(centre+-25k)|=%0.0f", BARK ? "Bark" : "Mel",
             ARCH, BAND, lo, hi, gc, gs);
    done = 1;
  end
endmodule
