// tb_register_array -- checks that every slot takes its input on the rising
// edge, holds it through the rest of the cycle (including the falling edge,
// where the butterflies update their outputs) and clears on reset.
`timescale 1ns/1ps
module tb_register_array;
  import fft_pkg::*;

  localparam int N = 8;
  int    checks = 0, failures = 0;
  logic  clk = 1'b0, rst_n = 1'b0;
  cplx_t d [N], q [N], held [N];

  register_array dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL t=%0t: %s", $time, what);
    end
  endfunction

  initial begin
    foreach (d[n]) d[n] = cplx_t'({$urandom, $urandom});
    @(posedge clk); #1;
    foreach (q[n]) check(q[n] == '0, "not cleared by reset");
    rst_n = 1'b1;
    for (int i = 0; i < 1000; i++) begin
      if (i == 700) rst_n = 1'b0;
      if (i == 701) rst_n = 1'b1;
      foreach (d[n]) d[n] = cplx_t'({$urandom, $urandom});
      held = d;
      @(negedge clk);
      foreach (d[n]) d[n] = cplx_t'({$urandom, $urandom});   // changes after the set-up
      #4;
      foreach (d[n]) d[n] = held[n];
      @(posedge clk); #1;
      foreach (d[n]) d[n] = cplx_t'({$urandom, $urandom});   // must not leak through
      #1;
      foreach (q[n]) check(q[n] == (rst_n ? held[n] : '0), $sformatf("slot %0d", n));
      @(negedge clk); #1;
      foreach (q[n]) check(q[n] == (rst_n ? held[n] : '0), $sformatf("slot %0d not held", n));
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
