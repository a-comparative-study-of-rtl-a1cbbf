// fir_mac: single-rate, single-channel FIR filter built around one
// multiply-accumulate unit, in the way a filter generator maps a long filter
// with a low sample rate (201 taps at 0.1 MHz on a 50 MHz clock).
//
// How it works.  Input samples go into an N_TAPS-deep circular buffer.  Each
// accepted sample starts one pass of N_TAPS clocks: pass step k reads
// coefficient k (through coef_addr / coef, an external synchronous memory such
// as band_coef_rom) and the sample taken k samples earlier, multiplies them
// and adds the product into the accumulator, so
//     dout(n) = sum_{k=0}^{N_TAPS-1} c[k] * x(n-k).
// Samples before the first one after reset count as zero: after reset the
// buffer is cleared, one word per clock, before rfd rises.  The full-precision
// sum is saturated to OUT_W bits (band_coef_rom designs its coefficients so
// this never happens in the bank).
//
// Interface.  nd/din: new input sample, accepted when rfd is high (nd while
// rfd is low is a protocol error, flagged by an assertion).  rdy: one-clock
// pulse with dout holding the new output until the next one.  coef_addr /
// coef: coefficient memory port with one clock of read latency.  ce: clock
// enable, freezes everything when low.  rst: synchronous, active high.
// Timing.  Counting enabled clocks from the edge that accepts nd, rdy rises
// after LATENCY = N_TAPS + 2 edges; rfd is low for N_TAPS edges, so samples
// may arrive at most every N_TAPS + 1 clocks.  After reset rfd stays low for
// N_TAPS clocks while the buffer is cleared.
//
// The specification fixes the tap count, input width, rates and the use of
// one multiplier and block memories per filter (13 DSP slices for 13 Mel
// filters); the pipeline, handshake names and saturation are this design's.
module fir_mac #(
  parameter int N_TAPS = fb_pkg::N_TAPS,
  parameter int DIN_W  = fb_pkg::DIN_W,
  parameter int COEF_W = fb_pkg::COEF_W,
  parameter int OUT_W  = fb_pkg::FIR_OUT_W,
  parameter int AW     = $clog2(N_TAPS)
) (
  input  logic                     clk,
  input  logic                     ce,
  input  logic                     rst,
  input  logic                     nd,
  input  logic signed [DIN_W-1:0]  din,
  output logic                     rfd,
  output logic [AW-1:0]            coef_addr,
  input  logic signed [COEF_W-1:0] coef,
  output logic signed [OUT_W-1:0]  dout,
  output logic                     rdy
);

  localparam int PROD_W = DIN_W + COEF_W;
  // Full-precision sum, never narrower than the output.
  localparam int FULL_W = PROD_W + $clog2(N_TAPS);
  localparam int ACC_W  = (FULL_W > OUT_W) ? FULL_W : OUT_W;
  localparam logic [AW-1:0] LAST = AW'(N_TAPS - 1);

  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_RUN} state_e;

  state_e                   state;
  logic [AW-1:0]            wr_ptr, rd_ptr, tap;
  logic signed [DIN_W-1:0]  buf_mem [N_TAPS];
  logic signed [DIN_W-1:0]  x_q;
  logic signed [PROD_W-1:0] prod;
  logic signed [ACC_W-1:0]  acc, acc_next;
  logic                     v1, f1, l1, v2, f2, l2;

  assign rfd       = (state == S_IDLE);
  assign coef_addr = tap;
  assign acc_next  = f2 ? ACC_W'(prod) : acc + ACC_W'(prod);

  function automatic logic signed [OUT_W-1:0] saturate(logic signed [ACC_W-1:0] v);
    localparam logic signed [ACC_W-1:0] MAXV = ACC_W'({1'b0, {(OUT_W-1){1'b1}}});
    localparam logic signed [ACC_W-1:0] MINV = -MAXV - 1;
    if (v > MAXV) return OUT_W'(MAXV);
    if (v < MINV) return OUT_W'(MINV);
    return OUT_W'(v);
  endfunction

  // Control and sample buffer.
  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= S_CLEAR;
      wr_ptr <= '0;
      rd_ptr <= '0;
      tap    <= '0;
      v1     <= 1'b0;
      f1     <= 1'b0;
      l1     <= 1'b0;
    end else if (ce) begin
      v1 <= (state == S_RUN);
      f1 <= (state == S_RUN) && (tap == '0);
      l1 <= (state == S_RUN) && (tap == LAST);
      unique case (state)
        S_CLEAR: begin
          buf_mem[wr_ptr] <= '0;
          if (wr_ptr == LAST) begin
            wr_ptr <= '0;
            state  <= S_IDLE;
          end else begin
            wr_ptr <= wr_ptr + 1'b1;
          end
        end
        S_IDLE: begin
          if (nd) begin
            buf_mem[wr_ptr] <= din;
            rd_ptr <= wr_ptr;
            wr_ptr <= (wr_ptr == LAST) ? '0 : wr_ptr + 1'b1;
            tap    <= '0;
            state  <= S_RUN;
          end
        end
        S_RUN: begin
          x_q    <= buf_mem[rd_ptr];
          rd_ptr <= (rd_ptr == '0) ? LAST : rd_ptr - 1'b1;
          tap    <= tap + 1'b1;
          if (tap == LAST) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Multiply and accumulate.
  always_ff @(posedge clk) begin
    if (rst) begin
      v2   <= 1'b0;
      f2   <= 1'b0;
      l2   <= 1'b0;
      prod <= '0;
      acc  <= '0;
      dout <= '0;
      rdy  <= 1'b0;
    end else if (ce) begin
      v2   <= v1;
      f2   <= f1;
      l2   <= l1;
      prod <= PROD_W'(x_q) * PROD_W'(coef);
      rdy  <= 1'b0;
      if (v2) begin
        acc <= acc_next;
        if (l2) begin
          dout <= saturate(acc_next);
          rdy  <= 1'b1;
        end
      end
    end
  end

`ifndef SYNTHESIS
  // A sample offered while the filter is busy would be lost.
  a_nd_when_ready: assert property (@(posedge clk) disable iff (rst) (ce && nd) |-> rfd)
    else $error("fir_mac: nd asserted while rfd is low");
`endif

endmodule
