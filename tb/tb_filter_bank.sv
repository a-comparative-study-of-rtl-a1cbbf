// tb_filter_bank: runs all six configurations the bank is specified with -
// Mel and Bark, band tables 1 to 3 - each on its own tone, and checks every
// final sum, its latency and its period (see filter_bank_harness).  Clock
// enable stalls and a mid-run reset must each happen in every configuration.
module tb_filter_bank;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int c [6], f [6], st [6], rs [6];
  bit d [6];
  int checks, failures;

  filter_bank_harness #(.BARK(0), .ARCH(1), .TUNING(fb_pkg::tuning_word(1000,  100000))) h0 (.clk, .checks(c[0]), .failures(f[0]), .n_stall(st[0]), .n_reset(rs[0]), .done(d[0]));
  filter_bank_harness #(.BARK(0), .ARCH(2), .TUNING(fb_pkg::tuning_word(300,   100000))) h1 (.clk, .checks(c[1]), .failures(f[1]), .n_stall(st[1]), .n_reset(rs[1]), .done(d[1]));
  filter_bank_harness #(.BARK(0), .ARCH(3), .TUNING(fb_pkg::tuning_word(9000,  100000))) h2 (.clk, .checks(c[2]), .failures(f[2]), .n_stall(st[2]), .n_reset(rs[2]), .done(d[2]));
  filter_bank_harness #(.BARK(1), .ARCH(1), .TUNING(fb_pkg::tuning_word(1000,  100000))) h3 (.clk, .checks(c[3]), .failures(f[3]), .n_stall(st[3]), .n_reset(rs[3]), .done(d[3]));
  filter_bank_harness #(.BARK(1), .ARCH(2), .TUNING(fb_pkg::tuning_word(3000,  100000))) h4 (.clk, .checks(c[4]), .failures(f[4]), .n_stall(st[4]), .n_reset(rs[4]), .done(d[4]));
  filter_bank_harness #(.BARK(1), .ARCH(3), .TUNING(fb_pkg::tuning_word(14000, 100000))) h5 (.clk, .checks(c[5]), .failures(f[5]), .n_stall(st[5]), .n_reset(rs[5]), .done(d[5]));

  initial begin
    fork
      begin
        repeat (60000) @(posedge clk);
        $display("watchdog expired");
      end
      wait (d[0] && d[1] && d[2] && d[3] && d[4] && d[5]);
    join_any
    checks = 0; failures = 0;
    for (int i = 0; i < 6; i++) begin
      checks += c[i] + 2; failures += f[i];
      if (!d[i])      begin failures++; $display("FAIL configuration %0d did not finish", i); end
      if (st[i] == 0) begin failures++; $display("FAIL configuration %0d never stalled", i); end
      if (rs[i] == 0) begin failures++; $display("FAIL configuration %0d never reset", i); end
      $display("configuration %0d: %0d checks, %0d stall cycles, %0d resets", i, c[i], st[i], rs[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
