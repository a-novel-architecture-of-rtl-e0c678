// tb_twiddle_rom -- checks every ROM entry against twiddles computed here.
//
// For N = 8, 32 and 1024 every stage s and butterfly j is read; the entry must
// equal W_N^k with k = (j mod 2**s) * N / 2**(s+1), rounded to 16 fraction
// bits. The N = 8 last-stage word is also compared with literal values
// (1, W8^1 = 0.7071 - 0.7071j, -j, W8^3 = -0.7071 - 0.7071j).
`timescale 1ns/1ps
module tb_twiddle_rom;
  import fft_pkg::*;
  import fft_ref_pkg::tw_re;
  import fft_ref_pkg::tw_im;

  int checks = 0, failures = 0;

  logic [1:0] sb8;    twid_t w8 [4];
  logic [2:0] sb32;   twid_t w32 [16];
  logic [3:0] sb1k;   twid_t w1k [512];

  twiddle_rom #(.N(8))    u8  (.sb(sb8),  .w(w8));
  twiddle_rom #(.N(32))   u32 (.sb(sb32), .w(w32));
  twiddle_rom #(.N(1024)) u1k (.sb(sb1k), .w(w1k));

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

  function automatic int kexp(input int n, input int s, input int j);
    return (j % (1 << s)) * (n >> (s + 1));
  endfunction

  initial begin
    for (int s = 0; s < 3; s++) begin
      sb8 = 2'(s); #1;
      for (int j = 0; j < 4; j++)
        check(longint'(w8[j].re) == tw_re(kexp(8, s, j), 8) && longint'(w8[j].im) == tw_im(kexp(8, s, j), 8),
              $sformatf("N=8 s=%0d j=%0d: (%0d,%0d)", s, j, w8[j].re, w8[j].im));
    end
    sb8 = 2'd2; #1;
    check(w8[0].re == 65536  && w8[0].im == 0,      "W8^0");
    check(w8[1].re == 46341  && w8[1].im == -46341, "W8^1");
    check(w8[2].re == 0      && w8[2].im == -65536, "W8^2");
    check(w8[3].re == -46341 && w8[3].im == -46341, "W8^3");
    for (int s = 0; s < 5; s++) begin
      sb32 = 3'(s); #1;
      for (int j = 0; j < 16; j++)
        check(longint'(w32[j].re) == tw_re(kexp(32, s, j), 32) && longint'(w32[j].im) == tw_im(kexp(32, s, j), 32),
              $sformatf("N=32 s=%0d j=%0d", s, j));
    end
    for (int s = 0; s < 10; s++) begin
      sb1k = 4'(s); #1;
      for (int j = 0; j < 512; j++)
        check(longint'(w1k[j].re) == tw_re(kexp(1024, s, j), 1024) && longint'(w1k[j].im) == tw_im(kexp(1024, s, j), 1024),
              $sformatf("N=1024 s=%0d j=%0d", s, j));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
