// tb_mel_bark_top: end-to-end run of the Mel and Bark banks together, with
// every parameter at its default (201 taps, band table 1, 1 kHz tone, 500
// clocks per sample, 50 MHz clock).  It simulates 1200 us of operation, as
// in the original evaluation, plus a reset and clock-enable stalls, and
// checks:
//   - every Mel and Bark final sum against the reference convolution,
//   - the tone samples against the reference DDS,
//   - N_TAPS + 7 clocks from sample to sum, and coinciding valid pulses,
//   - that each mechanism happened: sums from both banks, ck_en stalls, a
//     mid-run reset, and Mel and Bark sums that differ for the same input,
//   - that both sums hold while the clock enable stays low at the end.
module tb_mel_bark_top;
  localparam int N_TAPS = 201;
  localparam int PERIOD = 500;
  localparam logic [31:0] TW = fb_pkg::tuning_word(1000, 100000);

  logic ck = 1'b0, ck_en = 1'b0, rst = 1'b1;
  logic signed [29:0] mel_final_sum, bark_final_sum;
  logic mel_sum_valid, bark_sum_valid;
  logic signed [7:0] wave_out;

  int checks = 0, failures = 0;
  int n_mel = 0, n_bark = 0, n_stall = 0, n_reset = 0, n_differ = 0;
  longint hm [N_TAPS], hb [N_TAPS];
  int x_hist [$];
  longint exp_m [$], exp_b [$];
  int n_en, n_sample, since_tick;
  bit tick_seen;

  mel_bark_top dut (
    .ck, .ck_en, .rst, .mel_final_sum, .mel_sum_valid, .bark_final_sum, .bark_sum_valid, .wave_out
  );

  always #10 ck = ~ck;   // 50 MHz

  initial begin
    repeat (75000) @(posedge ck);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  function automatic longint conv(ref longint h [N_TAPS]);
    longint a = 0;
    for (int k = 0; k < N_TAPS && k < x_hist.size(); k++)
      a += h[k] * longint'(x_hist[x_hist.size() - 1 - k]);
    return a;
  endfunction

  function automatic int ref_x(int k);
    longint unsigned ph = (longint'(k) * longint'(TW)) & 64'hffff_ffff;
    return fb_ref_pkg::ref_sine(int'(ph >> 24));
  endfunction

  // Sample timing model: a sample every PERIOD-th enabled edge after reset.
  always @(posedge ck) begin
    if (rst) n_en = 0;
    else if (ck_en) begin
      n_en++;
      if (n_en % PERIOD == 0) begin
        x_hist.push_back(ref_x(n_sample));
        exp_m.push_back(conv(hm));
        exp_b.push_back(conv(hb));
        n_sample++;
        since_tick = 0;
        tick_seen = 1;
      end else if (tick_seen) since_tick++;
    end
  end

  initial begin
    int rc [];
    time t_end;
    n_sample = 0; tick_seen = 0; since_tick = 0;
    foreach (hm[k]) begin hm[k] = 0; hb[k] = 0; end
    for (int b = 1; b <= 13; b++) begin
      fb_ref_pkg::ref_coefs(1'b0, 1, b, N_TAPS, rc);
      foreach (hm[k]) hm[k] += rc[k];
      fb_ref_pkg::ref_coefs(1'b1, 1, b, N_TAPS, rc);
      foreach (hb[k]) hb[k] += rc[k];
    end
    repeat (3) @(posedge ck);
    #1 rst = 1'b0; ck_en = 1'b1;
    t_end = $time + 1200us;
    while ($time < t_end) begin
      @(posedge ck); #1;
      if (!rst && ck_en) begin
        if (mel_sum_valid || bark_sum_valid) begin
          check("valid_together", mel_sum_valid, bark_sum_valid);
          check("latency", since_tick, N_TAPS + 7);
          check("wave_out", wave_out, x_hist[$]);
        end
        if (mel_sum_valid) begin
          check("mel_sum", mel_final_sum, exp_m.pop_front());
          n_mel++;
        end
        if (bark_sum_valid) begin
          check("bark_sum", bark_final_sum, exp_b.pop_front());
          n_bark++;
          if (mel_final_sum != bark_final_sum) n_differ++;
        end
        // One reset in the middle of the run.
        if (n_mel == 60 && n_reset == 0 && mel_sum_valid) begin
          rst = 1'b1; n_reset++;
          @(posedge ck); #1;
          rst = 1'b0;
          check("reset_mel", mel_final_sum, 0);
          check("reset_bark", bark_final_sum, 0);
          x_hist.delete(); exp_m.delete(); exp_b.delete(); n_sample = 0; tick_seen = 0;
        end
      end
      ck_en = ($urandom_range(0, 49) != 0);
      if (!ck_en) n_stall++;
    end
    // Stop the clock (ck_en low) for 2000 clocks: the last sums must hold.
    begin
      logic signed [29:0] m_last, b_last;
      bit held = 1;
      ck_en = 1'b0;
      m_last = mel_final_sum; b_last = bark_final_sum;
      repeat (2000) begin
        @(posedge ck); #1;
        if (mel_final_sum != m_last || bark_final_sum != b_last || mel_sum_valid) held = 0;
      end
      check("hold_when_stopped", held, 1);
      n_stall += 2000;
    end
    $display("sums: mel %0d bark %0d, differing %0d; stall cycles %0d; resets %0d",
             n_mel, n_bark, n_differ, n_stall, n_reset);
    checks++; if (n_mel < 100)   begin failures++; $display("FAIL too few Mel sums"); end
    checks++; if (n_bark < 100)  begin failures++; $display("FAIL too few Bark sums"); end
    checks++; if (n_stall == 0)  begin failures++; $display("FAIL no clock-enable stall"); end
    checks++; if (n_reset == 0)  begin failures++; $display("FAIL no mid-run reset"); end
    checks++; if (n_differ == 0) begin failures++; $display("FAIL Mel and Bark sums never differed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
