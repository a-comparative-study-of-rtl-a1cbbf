// mel_bark_top: the Mel filter bank and the Bark filter bank side by side,
// sharing one clock, clock enable and reset, so both can be run on the same
// tone and their final sums compared sample by sample.
//
// Each bank is a filter_bank with its own sine_wave source (both sources use
// the same tuning word, so both banks see the identical input sequence).
// MEL_ARCH / BARK_ARCH select which of the three band tables each bank uses.
//
// Interface: ck, ck_en, rst (synchronous, active high); per bank a 30-bit
// final sum with a one-clock valid pulse.  Timing as filter_bank: one sum per
// SAMPLE_PERIOD enabled clocks, the two banks' valid pulses coincide.
//
// The specification builds the two banks as separate designs with identical
// ports (ck, ck_en, rst, 30-bit final sum); putting them under one top is
// this design's choice.
module mel_bark_top #(
  parameter int                         MEL_ARCH      = 1,
  parameter int                         BARK_ARCH     = 1,
  parameter int                         N_TAPS        = fb_pkg::N_TAPS,
  parameter int                         SAMPLE_PERIOD = fb_pkg::SAMPLE_PERIOD,
  parameter logic [fb_pkg::PHASE_W-1:0] SINE_TUNING   = fb_pkg::tuning_word(fb_pkg::SINE_HZ, fb_pkg::FS_HZ)
) (
  input  logic                            ck,
  input  logic                            ck_en,
  input  logic                            rst,
  output logic signed [fb_pkg::SUM_W-1:0] mel_final_sum,
  output logic                            mel_sum_valid,
  output logic signed [fb_pkg::SUM_W-1:0] bark_final_sum,
  output logic                            bark_sum_valid,
  output logic signed [fb_pkg::DIN_W-1:0] wave_out
);

  logic signed [fb_pkg::DIN_W-1:0] bark_wave;

  filter_bank #(
    .BANK(fb_pkg::BANK_MEL), .ARCH(MEL_ARCH), .N_TAPS(N_TAPS),
    .SAMPLE_PERIOD(SAMPLE_PERIOD), .SINE_TUNING(SINE_TUNING)
  ) u_mel_bank (
    .ck, .ck_en, .rst, .final_sum(mel_final_sum), .sum_valid(mel_sum_valid), .wave_out
  );

  filter_bank #(
    .BANK(fb_pkg::BANK_BARK), .ARCH(BARK_ARCH), .N_TAPS(N_TAPS),
    .SAMPLE_PERIOD(SAMPLE_PERIOD), .SINE_TUNING(SINE_TUNING)
  ) u_bark_bank (
    .ck, .ck_en, .rst, .final_sum(bark_final_sum), .sum_valid(bark_sum_valid), .wave_out(bark_wave)
  );

`ifndef SYNTHESIS
  a_same_input: assert property (@(posedge ck) disable iff (rst) wave_out == bark_wave)
    else $error("mel_bark_top: the two banks see different inputs");
`endif

endmodule
