// band_coef_rom: coefficient memory of one band-pass FIR filter of the bank.
//
// The N_TAPS coefficients are designed at elaboration by the window method:
// the ideal band-pass response between the band's lower and upper cut-off
// (fb_pkg band tables, BANK / ARCH / BAND select the entry) is multiplied by a
// Bartlett window for the Mel bank or a Hamming window for the Bark bank, then
// scaled by fb_pkg::coef_scale() and rounded to COEF_W-bit signed integers.
// The result is symmetric (linear phase) and guarantees that a filter fed with
// DIN_W-bit samples never exceeds FIR_OUT_W signed bits.
//
// Interface: addr selects a tap (0 .. N_TAPS-1), coef returns it.
// Timing: synchronous read, coef is valid on the clock after addr, updated
// only when ce is high (one block-RAM read port).
//
// Window types, cut-offs, tap count and the use of a coefficient memory per
// filter follow the specification; the quantization rule is this design's
// own, as the specification leaves it to the filter generator.
module band_coef_rom #(
  parameter fb_pkg::bank_e BANK      = fb_pkg::BANK_MEL,
  parameter int            ARCH      = 1,
  parameter int            BAND      = 1,
  parameter int            N_TAPS    = fb_pkg::N_TAPS,
  parameter int            COEF_W    = fb_pkg::COEF_W,
  parameter int            AW        = $clog2(N_TAPS)
) (
  input  logic                     clk,
  input  logic                     ce,
  input  logic [AW-1:0]            addr,
  output logic signed [COEF_W-1:0] coef
);

  typedef logic signed [COEF_W-1:0] rom_t [N_TAPS];

  function automatic rom_t make_rom();
    rom_t r;
    real  s;
    s = fb_pkg::coef_scale(BANK, ARCH, BAND, N_TAPS);
    for (int n = 0; n < N_TAPS; n++)
      r[n] = COEF_W'(fb_pkg::round_int(s * fb_pkg::coef_real(BANK, ARCH, BAND, n, N_TAPS)));
    return r;
  endfunction

  localparam rom_t ROM = make_rom();

  always_ff @(posedge clk) begin
    if (ce) coef <= (int'(addr) < N_TAPS) ? ROM[addr] : '0;
  end

endmodule
