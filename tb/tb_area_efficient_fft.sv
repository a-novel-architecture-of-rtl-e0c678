// tb_area_efficient_fft -- end-to-end test of the FFT processor at its
// default size (N = 8).
//
// Frames of random complex samples, plus an impulse and a constant, are fed
// through the ready/start interface, sometimes back to back, sometimes after
// idle cycles. Every accepted frame is transformed by the bit-exact
// reference model in fft_ref_pkg; each y_valid cycle must deliver the next
// expected frame, log2N-1 cycles after the frame was accepted, and must also
// lie within a few LSBs of the exact DFT. Outside y_valid the output must be
// zero. The test counts how often each mechanism of the processor was used:
// stage 0 on external input (ISL = 0), feedback stages through the register
// array (ISL = 1), the output stage (OSL = 1), frames accepted right after
// the previous one, and idle cycles; one that never happens is a failure.
// Inputs are driven 1 time unit after the rising edge and outputs sampled
// 1 time unit after the falling edge, when the butterfly results are stable.
`timescale 1ns/1ps
module tb_area_efficient_fft;
  import fft_pkg::*;
  import fft_ref_pkg::*;

  localparam int N      = 8;
  localparam int M      = $clog2(N);
  localparam int FRAMES = 200;
  localparam int AMP    = (1 << (DATA_W - 2)) / (2 * N);

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  start = 1'b0;
  cplx_t x [N];
  logic  ready, y_valid;
  cplx_t y [N];

  int checks = 0, failures = 0;
  int cycle = 0;

  area_efficient_fft dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (FRAMES * (M + 4) + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected frames, in order of acceptance.
  longint exp_r [$][], exp_i [$][];
  longint in_r  [$][], in_i  [$][];
  int     exp_cycle [$];

  int n_ext = 0, n_feedback = 0, n_out = 0, n_b2b = 0, n_idle = 0;
  int accepted = 0, received = 0;
  int last_out_cycle = -10;

  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL t=%0t: %s", $time, what);
    end
  endfunction

  // Output monitor.
  always @(negedge clk) begin
    #1;
    if (rst_n) begin
      if (dut.isl) n_feedback++;
      // ready must be high exactly when no earlier frame is in flight.
      check(ready == !(exp_cycle.size() > 0 && exp_cycle[0] - (M - 1) < cycle),
            "ready does not match the frames in flight");
      if (y_valid) begin
        n_out++;
        last_out_cycle = cycle;
        check(exp_r.size() > 0, "y_valid with no frame outstanding");
        if (exp_r.size() > 0) begin
          longint er[], ei[], xr[], xi[];
          int     ec;
          er = exp_r.pop_front(); ei = exp_i.pop_front();
          xr = in_r.pop_front();  xi = in_i.pop_front();
          ec = exp_cycle.pop_front();
          check(cycle == ec, $sformatf("latency: output in cycle %0d, expected %0d", cycle, ec));
          for (int k = 0; k < N; k++) begin
            real dr, di;
            check(longint'(y[k].re) == er[k] && longint'(y[k].im) == ei[k],
                  $sformatf("frame %0d bin %0d: got (%0d,%0d) expected (%0d,%0d)",
                            received, k, y[k].re, y[k].im, er[k], ei[k]));
            dr = dft_re(N, xr, xi, k) - real'(y[k].re);
            di = dft_im(N, xr, xi, k) - real'(y[k].im);
            check(dr < 2.0 * M + 2 && dr > -2.0 * M - 2 && di < 2.0 * M + 2 && di > -2.0 * M - 2,
                  $sformatf("frame %0d bin %0d differs from the DFT by (%f,%f)", received, k, dr, di));
          end
          received++;
        end
      end else begin
        for (int k = 0; k < N; k++)
          check(y[k] == '0, $sformatf("bin %0d not zero outside y_valid", k));
      end
    end
  end

  initial begin : stimulus
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    while (accepted < FRAMES) begin
      longint xr[], xi[], yr[], yi[];
      bit     go;
      @(posedge clk); #1;
      go = ($urandom_range(0, 3) != 0);
      xr = new[N]; xi = new[N];
      for (int n = 0; n < N; n++) begin
        case (accepted)
          0:       begin xr[n] = (n == 0) ? AMP : 0; xi[n] = 0; end    // impulse
          1:       begin xr[n] = AMP; xi[n] = -AMP; end                // constant
          default: begin
            xr[n] = longint'($urandom_range(0, 2 * AMP)) - AMP;
            xi[n] = longint'($urandom_range(0, 2 * AMP)) - AMP;
          end
        endcase
        x[n].re = sample_t'(xr[n]);
        x[n].im = sample_t'(xi[n]);
      end
      start = go;
      @(negedge clk); #0.5;
      if (ready && go) begin
        yr = new[N]; yi = new[N];
        fixed_fft(N, xr, xi, yr, yi);
        exp_r.push_back(yr); exp_i.push_back(yi);
        in_r.push_back(xr);  in_i.push_back(xi);
        exp_cycle.push_back(cycle + M - 1);
        n_ext++;
        if (last_out_cycle == cycle - 1) n_b2b++;
        accepted++;
      end else if (ready) begin
        n_idle++;
      end
    end
    @(posedge clk); #1 start = 1'b0;
    repeat (M + 2) @(posedge clk);
    check(received == FRAMES, $sformatf("received %0d of %0d frames", received, FRAMES));
    $display("mechanisms: external-input stages=%0d feedback stages=%0d output stages=%0d back-to-back frames=%0d idle cycles=%0d",
             n_ext, n_feedback, n_out, n_b2b, n_idle);
    check(n_ext > 0,      "stage 0 on external input never happened");
    check(n_feedback > 0, "no feedback stage happened");
    check(n_out > 0,      "no output stage happened");
    check(n_b2b > 0,      "no back-to-back frame happened");
    check(n_idle > 0,     "no idle cycle happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
