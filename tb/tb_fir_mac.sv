// tb_fir_mac: runs fir_mac with random coefficients at three sizes: the full
// 201 taps, a short filter, and a short filter with a narrow output so that
// saturation is exercised (it must occur at least once).
module tb_fir_mac;
  logic clk = 1'b0;
  int c0, f0, s0, c1, f1, s1, c2, f2, s2;
  bit d0, d1, d2;
  int checks, failures;

  always #5 clk = ~clk;

  fir_mac_harness #(.N_TAPS(201), .OUT_W(26), .N_OUT(60),  .SEED(11)) h0 (.clk, .checks(c0), .failures(f0), .n_sat(s0), .done(d0));
  fir_mac_harness #(.N_TAPS(9),   .OUT_W(32), .N_OUT(400), .SEED(22)) h1 (.clk, .checks(c1), .failures(f1), .n_sat(s1), .done(d1));
  fir_mac_harness #(.N_TAPS(5),   .OUT_W(20), .N_OUT(400), .SEED(33)) h2 (.clk, .checks(c2), .failures(f2), .n_sat(s2), .done(d2));

  initial begin
    fork
      begin
        repeat (200000) @(posedge clk);
        $display("watchdog expired");
        checks = c0 + c1 + c2; failures = f0 + f1 + f2 + 1;
      end
      wait (d0 && d1 && d2);
    join_any
    if (d0 && d1 && d2) begin
      checks = c0 + c1 + c2 + 1;
      failures = f0 + f1 + f2;
      if (s2 == 0) begin failures++; $display("FAIL saturation never exercised"); end
      $display("outputs saturated: %0d (short narrow filter)", s2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
