// tb_adder_tree: feeds a new random set of thirteen 26-bit filter outputs
// on every clock (extremes included) with random in_valid and ce, and checks
// that exactly four enabled clocks later sum equals the total of that set and
// out_valid equals its in_valid.  A wrong wiring or a missing alignment delay
// of filter 13 makes the sum mix different sets.
module tb_adder_tree;
  localparam int W  = 26;
  localparam int NB = 13;
  logic clk = 1'b0, ce = 1'b0, rst = 1'b1;
  logic signed [W-1:0] din [NB];
  logic in_valid = 1'b0;
  logic signed [W+3:0] sum;
  logic out_valid;
  longint hist_sum [$];
  bit     hist_v   [$];
  int checks = 0, failures = 0;

  adder_tree #(.IN_W(W)) dut (.clk, .ce, .rst, .din, .in_valid, .sum, .out_valid);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
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

  initial begin
    longint t;
    int mode;
    foreach (din[i]) din[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int i = 0; i < 4; i++) begin hist_sum.push_back(0); hist_v.push_back(0); end
    for (int i = 0; i < 6000; i++) begin
      mode = $urandom_range(0, 9);
      t = 0;
      foreach (din[k]) begin
        din[k] = (mode == 0) ? {1'b0, {(W-1){1'b1}}} :
                 (mode == 1) ? {1'b1, {(W-1){1'b0}}} : W'($urandom);
        t += longint'(din[k]);
      end
      in_valid = $urandom_range(0, 1);
      ce       = ($urandom_range(0, 4) != 0);
      @(posedge clk); #1;
      if (ce) begin
        hist_sum.push_back(t);
        hist_v.push_back(in_valid);
        void'(hist_sum.pop_front());
        void'(hist_v.pop_front());
      end
      check("sum", sum, hist_sum[0]);
      check("valid", out_valid, hist_v[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
