// sine_wave: direct digital synthesizer that produces the 8-bit sine test
// signal driving every filter of a bank.
//
// A PHASE_W-bit phase accumulator advances by TUNING on every enabled clock;
// its top LUT_AW bits address a full-period sine table computed at
// elaboration, table[k] = round((2^(OUT_W-1)-1) * sin(2*pi*k / 2^LUT_AW)).
// The output is a registered two's-complement sample.
//
// Interface: clock, enable, reset (synchronous, active high), wave_out.
// Timing: on a clock edge with enable high, wave_out takes the table value at
// the current phase and the phase advances, so the n-th enabled edge after
// reset (n = 0, 1, ...) outputs table[(n*TUNING) >> (PHASE_W-LUT_AW)].
// Reset clears phase and output.  In the bank, enable is high once per input
// sample period, so the tone frequency is TUNING * fs / 2^PHASE_W.
//
// The port names follow the sine_wave instance of the bank's schematic; the
// specification only says a DDS supplies the sine input.  The accumulator and
// table sizes and the default 1 kHz tone are this design's choices.
module sine_wave #(
  parameter int                        PHASE_W = fb_pkg::PHASE_W,
  parameter int                        LUT_AW  = 8,
  parameter int                        OUT_W   = fb_pkg::DIN_W,
  parameter logic [PHASE_W-1:0]        TUNING  = fb_pkg::tuning_word(fb_pkg::SINE_HZ, fb_pkg::FS_HZ)
) (
  input  logic                    clock,
  input  logic                    enable,
  input  logic                    reset,
  output logic signed [OUT_W-1:0] wave_out
);

  localparam int LUT_N = 2 ** LUT_AW;
  typedef logic signed [OUT_W-1:0] lut_t [LUT_N];

  function automatic lut_t make_lut();
    lut_t t;
    real  amp;
    amp = real'(2 ** (OUT_W - 1)) - 1.0;
    for (int k = 0; k < LUT_N; k++)
      t[k] = OUT_W'(fb_pkg::round_int(amp * $sin(2.0 * fb_pkg::PI * real'(k) / real'(LUT_N))));
    return t;
  endfunction

  localparam lut_t LUT = make_lut();

  logic [PHASE_W-1:0] phase;

  always_ff @(posedge clock) begin
    if (reset) begin
      phase    <= '0;
      wave_out <= '0;
    end else if (enable) begin
      wave_out <= LUT[phase[PHASE_W-1 -: LUT_AW]];
      phase    <= phase + TUNING;
    end
  end

endmodule
