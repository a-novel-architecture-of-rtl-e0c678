// tb_fft_sizes -- the processor at the transform sizes 16 to 1024 points
// (the sizes whose butterfly counts the area comparison tabulates), each
// running back-to-back random frames against the bit-exact reference model
// and checking the log2N-cycle frame timing. The 8-point size is covered by
// tb_area_efficient_fft.
`timescale 1ns/1ps
module tb_fft_sizes;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int S = 7;
  int   c [S], f [S];
  logic d [S];

  fft_size_check #(.N(16),   .FRAMES(40)) u16   (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .done(d[0]));
  fft_size_check #(.N(32),   .FRAMES(30)) u32   (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .done(d[1]));
  fft_size_check #(.N(64),   .FRAMES(20)) u64   (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .done(d[2]));
  fft_size_check #(.N(128),  .FRAMES(10)) u128  (.clk, .rst_n, .checks(c[3]), .failures(f[3]), .done(d[3]));
  fft_size_check #(.N(256),  .FRAMES(6))  u256  (.clk, .rst_n, .checks(c[4]), .failures(f[4]), .done(d[4]));
  fft_size_check #(.N(512),  .FRAMES(4))  u512  (.clk, .rst_n, .checks(c[5]), .failures(f[5]), .done(d[5]));
  fft_size_check #(.N(1024), .FRAMES(3))  u1024 (.clk, .rst_n, .checks(c[6]), .failures(f[6]), .done(d[6]));

  function automatic void report(input int extra);
    int checks = 0, failures = extra;
    for (int i = 0; i < S; i++) begin checks += c[i]; failures += f[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endfunction

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    $display("watchdog expired");
    report(1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    wait (d.and() == 1'b1);
    @(posedge clk);
    report(0);
    $finish;
  end

endmodule
