// tb_source_selector -- checks the input multiplexer column: with isl = 0
// every output must be the external sample of the same index, with isl = 1
// the register-array sample of the same index. Random data, both settings.
`timescale 1ns/1ps
module tb_source_selector;
  import fft_pkg::*;

  localparam int N = 8;
  int    checks = 0, failures = 0;
  logic  isl;
  cplx_t x [N], fb [N], d [N];

  source_selector dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      foreach (x[n])  x[n]  = cplx_t'({$urandom, $urandom});
      foreach (fb[n]) fb[n] = cplx_t'({$urandom, $urandom});
      isl = i[0];
      #1;
      foreach (d[n]) begin
        checks++;
        if (d[n] != (isl ? fb[n] : x[n])) begin
          failures++;
          if (failures < 10) $display("FAIL: isl=%0d slot %0d", isl, n);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
