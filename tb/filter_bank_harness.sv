// filter_bank_harness: runs one filter_bank (a given bank type, band table
// and tone) and checks every final sum against the reference: the DDS
// sequence of fb_ref_pkg convolved with the sum of the thirteen reference
// impulse responses (the bank is linear, so the sum of the filter outputs is
// the input filtered by the summed impulse response).  It also checks that
// sum_valid comes N_TAPS + 7 enabled clocks after each sample tick and that
// sums are SAMPLE_PERIOD enabled clocks apart.  ck_en drops at random
// (STALL) and the bank is reset once in the middle of the run (MID_RESET),
// after which the reference history restarts from zero.
module filter_bank_harness #(
  parameter bit          BARK          = 1'b0,
  parameter int          ARCH          = 1,
  parameter logic [31:0] TUNING        = fb_pkg::tuning_word(1000, 100000),
  parameter int          N_TAPS        = 201,
  parameter int          SAMPLE_PERIOD = 500,
  parameter int          N_SUMS        = 40,
  parameter bit          STALL         = 1'b1,
  parameter bit          MID_RESET     = 1'b1
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output int   n_stall,
  output int   n_reset,
  output bit   done
);
  localparam fb_pkg::bank_e BK = BARK ? fb_pkg::BANK_BARK : fb_pkg::BANK_MEL;
  logic ck_en = 1'b0, rst = 1'b1;
  logic signed [29:0] final_sum;
  logic signed [7:0]  wave_out;
  logic               sum_valid;
  longint             hsum [N_TAPS];
  int                 x_hist [$];
  longint             exp_q [$];
  int                 since_tick, since_sum, n_seen, n_sample, n_en;
  bit                 tick_seen, first_sum;

  filter_bank #(.BANK(BK), .ARCH(ARCH), .N_TAPS(N_TAPS), .SAMPLE_PERIOD(SAMPLE_PERIOD),
                .SINE_TUNING(TUNING)) dut (
    .ck(clk), .ck_en, .rst, .final_sum, .sum_valid, .wave_out
  );

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %m %s got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  function automatic longint expected();
    longint a = 0;
    for (int k = 0; k < N_TAPS && k < x_hist.size(); k++)
      a += hsum[k] * longint'(x_hist[x_hist.size() - 1 - k]);
    return a;
  endfunction

  // Reference input: the k-th sample after reset.
  function automatic int ref_x(int k);
    longint unsigned ph = (longint'(k) * longint'(TUNING)) & 64'hffff_ffff;
    return fb_ref_pkg::ref_sine(int'(ph >> 24));
  endfunction

  // Model of the sample timing: the bank takes a new sample on every
  // SAMPLE_PERIOD-th enabled clock edge after reset.
  always @(posedge clk) begin
    if (rst) n_en = 0;
    else if (ck_en) begin
      n_en++;
      if (n_en % SAMPLE_PERIOD == 0) begin
        x_hist.push_back(ref_x(n_sample));
        exp_q.push_back(expected());
        n_sample++;
        since_tick = 0;
        tick_seen = 1;
      end else if (tick_seen) since_tick++;
      since_sum++;
    end
  end

  initial begin
    int rc [];
    checks = 0; failures = 0; n_stall = 0; n_reset = 0; done = 0;
    n_sample = 0; tick_seen = 0; first_sum = 1; n_seen = 0; since_sum = 0;
    foreach (hsum[k]) hsum[k] = 0;
    for (int b = 1; b <= 13; b++) begin
      fb_ref_pkg::ref_coefs(BARK, ARCH, b, N_TAPS, rc);
      foreach (hsum[k]) hsum[k] += rc[k];
    end
    repeat (3) @(posedge clk);
    #1 rst = 1'b0; ck_en = 1'b1;
    while (n_seen < N_SUMS) begin
      @(posedge clk); #1;
      if (sum_valid && ck_en && !rst) begin
        check("latency", since_tick, N_TAPS + 7);
        if (!first_sum) check("period", since_sum, SAMPLE_PERIOD);
        check("final_sum", final_sum, exp_q.pop_front());
        first_sum = 0; since_sum = 0;
        n_seen++;
        if (MID_RESET && n_seen == N_SUMS / 2) begin
          rst = 1'b1; n_reset++;
          @(posedge clk); #1;
          rst = 1'b0;
          x_hist.delete(); exp_q.delete(); n_sample = 0; tick_seen = 0; first_sum = 1; since_sum = 0;
          check("reset_clears", final_sum, 0);
        end
      end
      ck_en = !(STALL && $urandom_range(0, 19) == 0);
      if (!ck_en) n_stall++;
    end
    done = 1;
  end
endmodule
