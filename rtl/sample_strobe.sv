// sample_strobe: divides the system clock down to the filter bank's input
// sample rate.  A modulo-PERIOD counter advances on every enabled clock and
// tick is high for the one enabled clock on which it wraps, i.e. once every
// PERIOD enabled clocks (500 clocks = 0.1 MHz from 50 MHz by default).
// After the synchronous active-high reset the first tick comes PERIOD clocks
// later, which leaves the filters time to clear their sample buffers.
// The 50 MHz clock and 0.1 MHz sample rate come from the specification; the
// counter is this design's way of producing the sample timing.
module sample_strobe #(
  parameter int PERIOD = fb_pkg::SAMPLE_PERIOD
) (
  input  logic clk,
  input  logic ce,
  input  logic rst,
  output logic tick
);

  localparam int CW = $clog2(PERIOD);

  logic [CW-1:0] cnt;

  assign tick = ce && (cnt == CW'(PERIOD - 1));

  always_ff @(posedge clk) begin
    if (rst)       cnt <= '0;
    else if (tick) cnt <= '0;
    else if (ce)   cnt <= cnt + 1'b1;
  end

endmodule
