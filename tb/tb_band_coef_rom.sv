// tb_band_coef_rom: checks the coefficient memory of every band of both
// banks and all three band tables (78 filters) against the reference design
// (see rom_check_harness).
module tb_band_coef_rom;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  localparam int NH = 2 * 3 * 13;
  int c [NH], f [NH];
  bit d [NH];
  int checks, failures;

  for (genvar bk = 0; bk < 2; bk++) begin : g_bank
    for (genvar a = 1; a <= 3; a++) begin : g_arch
      for (genvar b = 1; b <= 13; b++) begin : g_band
        localparam int I = (bk * 3 + (a - 1)) * 13 + (b - 1);
        rom_check_harness #(.BARK(bk[0]), .ARCH(a), .BAND(b)) h (
          .clk, .checks(c[I]), .failures(f[I]), .done(d[I])
        );
      end
    end
  end

  function automatic bit all_done();
    foreach (d[i]) if (!d[i]) return 0;
    return 1;
  endfunction

  initial begin
    fork
      begin
        repeat (20000) @(posedge clk);
        $display("watchdog expired");
      end
      begin
        do @(posedge clk); while (!all_done());
      end
    join_any
    checks = 0; failures = 0;
    for (int i = 0; i < NH; i++) begin checks += c[i]; failures += f[i]; if (!d[i]) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
