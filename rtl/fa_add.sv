// fa_add: one "FA" node of the bank's summing tree, a registered two-input
// signed adder that grows its result by one bit so it can never overflow.
//
// Interface: a, b (W-bit signed), s (W+1-bit signed).
// Timing: s <= a + b on every clock edge with ce high; synchronous active-high
// reset clears s.  Latency one clock.
//
// The specification only names these nodes "full adders" and draws where they
// connect; the word width, the bit of growth and the output register are
// this design's choices.
module fa_add #(
  parameter int W = fb_pkg::FIR_OUT_W
) (
  input  logic                clk,
  input  logic                ce,
  input  logic                rst,
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W:0]   s
);

  always_ff @(posedge clk) begin
    if (rst)     s <= '0;
    else if (ce) s <= (W+1)'(a) + (W+1)'(b);
  end

endmodule
