// filter_bank: one complete Mel or Bark filter bank.  A sine_wave DDS
// produces an 8-bit test tone at the input sample rate; thirteen band-pass
// FIR filters (fir_mac, each with its own band_coef_rom) filter it in
// parallel; adder_tree sums their outputs into the 30-bit final_sum.
// BANK picks the window (Mel: Bartlett, Bark: Hamming) and the band table,
// ARCH picks which of the three band tables (1..3) is used.
//
// Interface: ck, ck_en (clock enable, freezes the whole bank when low), rst
// (synchronous, active high), final_sum, sum_valid (one-clock pulse per new
// sum) and wave_out (the tone being filtered, for observation).
// Timing: every SAMPLE_PERIOD enabled clocks sample_strobe ticks and the DDS
// registers a new sample; one clock later all thirteen filters accept it,
// N_TAPS + 2 clocks after that they present their outputs, and 4 clocks
// later final_sum and sum_valid update: LATENCY = N_TAPS + 7 clocks from
// tick to sum_valid, and one sum per input sample.
//
// Structure (sine source, 13 filters, the adder tree, 8-bit in / 30-bit
// out, the ck / ck_en / rst pins) follows the specification; the sample
// strobe, handshakes and latencies are this design's.
module filter_bank #(
  parameter fb_pkg::bank_e             BANK          = fb_pkg::BANK_MEL,
  parameter int                        ARCH          = 1,
  parameter int                        N_TAPS        = fb_pkg::N_TAPS,
  parameter int                        SAMPLE_PERIOD = fb_pkg::SAMPLE_PERIOD,
  parameter logic [fb_pkg::PHASE_W-1:0] SINE_TUNING  = fb_pkg::tuning_word(fb_pkg::SINE_HZ, fb_pkg::FS_HZ)
) (
  input  logic                                ck,
  input  logic                                ck_en,
  input  logic                                rst,
  output logic signed [fb_pkg::SUM_W-1:0]     final_sum,
  output logic                                sum_valid,
  output logic signed [fb_pkg::DIN_W-1:0]     wave_out
);

  import fb_pkg::*;

  localparam int AW = $clog2(N_TAPS);

  // The filters must finish one sample before the next arrives.
  if (SAMPLE_PERIOD < N_TAPS + 2) begin : g_bad_period
    $error("filter_bank: SAMPLE_PERIOD must be at least N_TAPS + 2");
  end
  if (ARCH < 1 || ARCH > 3) begin : g_bad_arch
    $error("filter_bank: ARCH must be 1, 2 or 3");
  end

  logic                          tick, nd;
  logic signed [FIR_OUT_W-1:0]   fir_out [N_BANDS];
  logic [N_BANDS-1:0]            fir_rdy, fir_rfd;

  sample_strobe #(.PERIOD(SAMPLE_PERIOD)) u_strobe (
    .clk(ck), .ce(ck_en), .rst, .tick
  );

  sine_wave #(.TUNING(SINE_TUNING)) u_sine (
    .clock(ck), .enable(tick), .reset(rst), .wave_out
  );

  always_ff @(posedge ck) begin
    if (rst)        nd <= 1'b0;
    else if (ck_en) nd <= tick;
  end

  for (genvar b = 0; b < N_BANDS; b++) begin : g_band
    logic [AW-1:0]            addr;
    logic signed [COEF_W-1:0] coef;

    band_coef_rom #(.BANK(BANK), .ARCH(ARCH), .BAND(b + 1), .N_TAPS(N_TAPS)) u_rom (
      .clk(ck), .ce(ck_en), .addr, .coef
    );

    fir_mac #(.N_TAPS(N_TAPS)) u_fir (
      .clk(ck), .ce(ck_en), .rst, .nd, .din(wave_out), .rfd(fir_rfd[b]),
      .coef_addr(addr), .coef, .dout(fir_out[b]), .rdy(fir_rdy[b])
    );
  end

  adder_tree #(.IN_W(FIR_OUT_W)) u_tree (
    .clk(ck), .ce(ck_en), .rst, .din(fir_out), .in_valid(fir_rdy[0]),
    .sum(final_sum), .out_valid(sum_valid)
  );

`ifndef SYNTHESIS
  // All thirteen filters run in lock step.
  a_lockstep: assert property (@(posedge ck) disable iff (rst)
                               (fir_rdy == '0 || fir_rdy == '1) && (fir_rfd == '0 || fir_rfd == '1))
    else $error("filter_bank: filters out of step");
`endif

endmodule
