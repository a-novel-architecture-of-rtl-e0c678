// tb_output_selector -- checks the output demultiplexers. With osl = 0 the
// butterfly outputs go to the register array in butterfly order (sum of
// butterfly j to slot 2j, difference to slot 2j+1) and the output port is
// zero; with osl = 1 the register side is zero and the sum of butterfly j
// appears as Y(j), its difference as Y(j + N/2).
`timescale 1ns/1ps
module tb_output_selector;
  import fft_pkg::*;

  localparam int N = 8;
  int    checks = 0, failures = 0;
  logic  osl;
  cplx_t top [N/2], bot [N/2], fb [N], y [N];

  output_selector dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endfunction

  initial begin
    for (int i = 0; i < 500; i++) begin
      foreach (top[j]) top[j] = cplx_t'({$urandom, $urandom});
      foreach (bot[j]) bot[j] = cplx_t'({$urandom, $urandom});
      osl = i[0];
      #1;
      for (int j = 0; j < N / 2; j++) begin
        check(fb[2*j]   == (osl ? '0 : top[j]), $sformatf("fb[%0d] osl=%0d", 2*j, osl));
        check(fb[2*j+1] == (osl ? '0 : bot[j]), $sformatf("fb[%0d] osl=%0d", 2*j+1, osl));
        check(y[j]      == (osl ? top[j] : '0), $sformatf("y[%0d] osl=%0d", j, osl));
        check(y[j+N/2]  == (osl ? bot[j] : '0), $sformatf("y[%0d] osl=%0d", j+N/2, osl));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
