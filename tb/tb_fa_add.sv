// tb_fa_add: random and extreme operands through a 26-bit FA node; checks
// the registered sum (one clock later, with one bit of growth), that the
// output holds while ce is low, and that reset clears it.
module tb_fa_add;
  localparam int W = 26;
  logic clk = 1'b0, ce = 1'b0, rst = 1'b1;
  logic signed [W-1:0] a = '0, b = '0;
  logic signed [W:0]   s;
  longint exp_s;
  int checks = 0, failures = 0;

  fa_add #(.W(W)) dut (.clk, .ce, .rst, .a, .b, .s);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [W-1:0] pick();
    case ($urandom_range(0, 5))
      0: return {1'b0, {(W-1){1'b1}}};   // most positive
      1: return {1'b1, {(W-1){1'b0}}};   // most negative
      default: return W'($urandom);
    endcase
  endfunction

  task automatic check(longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL got %0d expected %0d at %0t", got, exp, $time);
    end
  endtask

  initial begin
    @(posedge clk); #1;
    check(s, 0);
    rst = 1'b0;
    exp_s = 0;
    for (int i = 0; i < 5000; i++) begin
      a  = pick();
      b  = pick();
      ce = ($urandom_range(0, 3) != 0);
      if (i == 4000) rst = 1'b1;
      if (i == 4001) rst = 1'b0;
      @(posedge clk); #1;
      if (rst)     exp_s = 0;
      else if (ce) exp_s = longint'(a) + longint'(b);
      check(s, exp_s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
