// fir_mac_harness: drives one fir_mac with random coefficients and random
// input samples and checks every output against a direct convolution of the
// input history (zero before reset), saturated to OUT_W bits.  Samples are
// offered at random gaps whenever rfd is high, ce is random, and the number
// of enabled clocks from the accepting edge to rdy must be N_TAPS + 2.  It
// also checks that rfd stays low for N_TAPS enabled clocks after reset and
// after each accepted sample.  Results go out on checks / failures.
module fir_mac_harness #(
  parameter int N_TAPS = 9,
  parameter int OUT_W  = 26,
  parameter int N_OUT  = 200,
  parameter int SEED   = 1
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output int   n_sat,
  output bit   done
);
  localparam int AW = $clog2(N_TAPS);
  logic ce = 1'b0, rst = 1'b1, nd = 1'b0, rfd, rdy;
  logic signed [7:0]  din = '0;
  logic [AW-1:0]      coef_addr;
  logic signed [15:0] coef;
  logic signed [15:0] cmem [N_TAPS];
  logic signed [OUT_W-1:0] dout;
  int   x_hist [$];
  longint exp_q [$];
  int   since_nd, since_rst;
  bit   pending;

  fir_mac #(.N_TAPS(N_TAPS), .OUT_W(OUT_W)) dut (
    .clk, .ce, .rst, .nd, .din, .rfd, .coef_addr, .coef, .dout, .rdy
  );

  // Coefficient memory model: synchronous read, gated by ce.
  always_ff @(posedge clk) if (ce) coef <= (int'(coef_addr) < N_TAPS) ? cmem[coef_addr] : '0;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %m %s got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  function automatic longint conv();
    longint a = 0;
    longint maxv = (longint'(1) << (OUT_W - 1)) - 1;
    for (int k = 0; k < N_TAPS; k++)
      a += longint'(cmem[k]) * ((k < x_hist.size()) ? longint'(x_hist[x_hist.size() - 1 - k]) : 0);
    if (a > maxv)      begin a = maxv;      n_sat++; end
    if (a < -maxv - 1) begin a = -maxv - 1; n_sat++; end
    return a;
  endfunction

  initial begin
    int n_done, seed;
    checks = 0; failures = 0; n_sat = 0; done = 0;
    seed = SEED;
    void'($urandom(seed));
    foreach (cmem[k]) cmem[k] = ($urandom_range(0, 9) == 0) ? 16'sh7fff : 16'($urandom);
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    since_rst = 0;
    // rfd must stay low while the buffer is cleared.
    while (!rfd) begin
      ce = ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
      if (ce) since_rst++;
    end
    check("clear_time", since_rst, N_TAPS);
    n_done = 0; pending = 0;
    while (n_done < N_OUT) begin
      ce = ($urandom_range(0, 5) != 0);
      nd = rfd && !pending && ($urandom_range(0, 2) == 0);
      din = 8'($urandom);
      if (ce && nd) begin
        x_hist.push_back(int'(din));
        exp_q.push_back(conv());
      end
      @(posedge clk); #1;
      if (ce && nd) begin since_nd = 0; pending = 1; end
      else if (ce && pending) since_nd++;
      if (pending && ce && !rfd && since_nd == 0) checks++;  // rfd dropped on accept
      if (rdy && ce) begin
        check("latency", since_nd, N_TAPS + 2);
        check("dout", dout, exp_q.pop_front());
        pending = 0;
        n_done++;
      end
      nd = 1'b0;
    end
    done = 1;
  end
endmodule
