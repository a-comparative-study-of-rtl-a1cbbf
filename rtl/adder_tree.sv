// adder_tree: sums the thirteen band-filter outputs into the bank's final
// sum with twelve fa_add nodes, wired as the bank's block diagram draws them:
//   level 1: (1+2) (3+4) (5+6) (7+8) (9+10) (11+12)
//   level 2: (1..4) (5..8) (9..12)
//   level 3: (1..8), and (9..12) + filter 13
//   level 4: final sum = (1..8) + (9..13)
// Every node adds one bit, so IN_W-bit inputs give an IN_W+4-bit sum that
// cannot overflow (26 -> 30 bits by default).
//
// Interface: din[0..12] (filter 1..13 outputs) with in_valid; sum with
// out_valid.  Timing: each node is registered, so sum and out_valid follow
// din / in_valid by LATENCY = 4 enabled clocks; filter 13, which joins at
// level 3, passes two alignment registers first.  ce freezes the tree;
// rst (synchronous, active high) clears it.
//
// The node connections follow the specification's diagram; the registers
// in each node and the alignment delay are this design's choices.
module adder_tree #(
  parameter int IN_W = fb_pkg::FIR_OUT_W
) (
  input  logic                   clk,
  input  logic                   ce,
  input  logic                   rst,
  input  logic signed [IN_W-1:0] din [fb_pkg::N_BANDS],
  input  logic                   in_valid,
  output logic signed [IN_W+3:0] sum,
  output logic                   out_valid
);

  localparam int LATENCY = 4;

  logic signed [IN_W:0]   l1 [6];
  logic signed [IN_W+1:0] l2 [3];
  logic signed [IN_W+2:0] l3 [2];
  logic signed [IN_W-1:0] d13_q1, d13_q2;
  logic signed [IN_W+1:0] d13_ext;
  logic [LATENCY-1:0]     vpipe;

  for (genvar i = 0; i < 6; i++) begin : g_l1
    fa_add #(.W(IN_W)) u_fa (.clk, .ce, .rst, .a(din[2*i]), .b(din[2*i+1]), .s(l1[i]));
  end
  for (genvar i = 0; i < 3; i++) begin : g_l2
    fa_add #(.W(IN_W+1)) u_fa (.clk, .ce, .rst, .a(l1[2*i]), .b(l1[2*i+1]), .s(l2[i]));
  end

  // Filter 13 waits two levels so that all terms of a sum come from the same
  // filter output sample.
  always_ff @(posedge clk) begin
    if (rst) begin
      d13_q1 <= '0;
      d13_q2 <= '0;
      vpipe  <= '0;
    end else if (ce) begin
      d13_q1 <= din[12];
      d13_q2 <= d13_q1;
      vpipe  <= {vpipe[LATENCY-2:0], in_valid};
    end
  end
  assign d13_ext = (IN_W+2)'(d13_q2);

  fa_add #(.W(IN_W+2)) u_fa_l3a (.clk, .ce, .rst, .a(l2[0]), .b(l2[1]),  .s(l3[0]));
  fa_add #(.W(IN_W+2)) u_fa_l3b (.clk, .ce, .rst, .a(l2[2]), .b(d13_ext), .s(l3[1]));
  fa_add #(.W(IN_W+3)) u_fa_l4  (.clk, .ce, .rst, .a(l3[0]), .b(l3[1]),  .s(sum));

  assign out_valid = vpipe[LATENCY-1];

endmodule
