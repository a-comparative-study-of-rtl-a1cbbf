// tb_sine_wave: checks the DDS against the reference sine table.  Two
// instances run with different tuning words; enable is random, so the test
// also checks that the output and phase hold while enable is low, and that
// reset restarts the sequence at phase zero.
module tb_sine_wave;
  import fb_ref_pkg::*;

  localparam logic [31:0] TW0 = fb_pkg::tuning_word(1000, 100000);
  localparam logic [31:0] TW1 = 32'h1234_5679;

  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  logic signed [7:0] w0, w1;
  int checks = 0, failures = 0;
  longint unsigned n_en;    // enabled edges since reset
  logic signed [7:0] exp0, exp1;

  sine_wave #(.TUNING(TW0)) dut0 (.clock(clk), .enable(en), .reset(rst), .wave_out(w0));
  sine_wave #(.TUNING(TW1)) dut1 (.clock(clk), .enable(en), .reset(rst), .wave_out(w1));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    exp0 = 0; exp1 = 0; n_en = 0;
    repeat (3) @(posedge clk);
    for (int pass = 0; pass < 2; pass++) begin
      rst <= 1'b1; en <= 1'b0;
      @(posedge clk);
      rst <= 1'b0;
      n_en = 0; exp0 = 0; exp1 = 0;
      for (int i = 0; i < 3000; i++) begin
        en <= ($urandom_range(0, 3) != 0);
        @(posedge clk);
        #1;
        if (en) begin
          exp0 = 8'(ref_sine(int'(((n_en * TW0) >> 24) & 8'hff)));
          exp1 = 8'(ref_sine(int'(((n_en * TW1) >> 24) & 8'hff)));
          n_en++;
        end
        check("dds0", w0, exp0);
        check("dds1", w1, exp1);
      end
    end
    // Known points of the table: a quarter period (tuning 2^30) gives 0, 127, 0, -127.
    check("peak", ref_sine(64), 127);
    check("trough", ref_sine(192), -127);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
