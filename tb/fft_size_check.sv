// fft_size_check -- runs one FFT processor of size N through a series of
// random frames and compares every result with the bit-exact reference
// model. Frames are offered back to back whenever the processor is ready;
// each result must appear log2N-1 cycles after its frame was accepted.
// Inputs are scaled so that no stage can overflow 18 bits:
// |x| <= 2**16 / (2N) per component. Reports its check and failure counts
// and raises done when all frames have come back.
`timescale 1ns/1ps
module fft_size_check
  import fft_pkg::*;
  import fft_ref_pkg::*;
#(
  parameter int N      = 16,
  parameter int FRAMES = 20
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);

  localparam int M   = $clog2(N);
  localparam int AMP = (1 << (DATA_W - 2)) / (2 * N);

  logic  start, ready, y_valid;
  cplx_t x [N], y [N];

  area_efficient_fft #(.N(N)) dut (.*);

  longint exp_r [$][], exp_i [$][];
  int     exp_cycle [$];
  int     cycle = 0, accepted = 0, received = 0;

  initial begin checks = 0; failures = 0; done = 1'b0; start = 1'b0; end

  always @(posedge clk) cycle <= cycle + 1;

  always @(negedge clk) begin
    #1;
    if (rst_n && y_valid) begin
      longint er[], ei[];
      int     bad = 0;
      er = exp_r.pop_front(); ei = exp_i.pop_front();
      checks++;
      if (exp_cycle.pop_front() != cycle) begin
        failures++;
        $display("FAIL N=%0d: frame %0d latency", N, received);
      end
      for (int k = 0; k < N; k++)
        if (longint'(y[k].re) != er[k] || longint'(y[k].im) != ei[k]) bad++;
      checks++;
      if (bad != 0) begin
        failures++;
        $display("FAIL N=%0d: frame %0d has %0d wrong bins", N, received, bad);
      end
      received++;
      if (received == FRAMES) done = 1'b1;
    end
  end

  initial begin
    @(posedge rst_n);
    while (accepted < FRAMES) begin
      longint xr[], xi[], yr[], yi[];
      @(posedge clk); #1;
      xr = new[N]; xi = new[N];
      for (int n = 0; n < N; n++) begin
        xr[n] = longint'($urandom_range(0, 2 * AMP)) - AMP;
        xi[n] = longint'($urandom_range(0, 2 * AMP)) - AMP;
        x[n]  = '{re: sample_t'(xr[n]), im: sample_t'(xi[n])};
      end
      start = 1'b1;
      @(negedge clk); #0.5;
      if (ready) begin
        fixed_fft(N, xr, xi, yr, yi);
        exp_r.push_back(yr); exp_i.push_back(yi);
        exp_cycle.push_back(cycle + M - 1);
        accepted++;
      end
    end
    @(posedge clk); #1 start = 1'b0;
  end

endmodule
