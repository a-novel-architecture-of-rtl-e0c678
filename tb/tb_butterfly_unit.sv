// tb_butterfly_unit -- checks the butterfly's arithmetic and its two-phase
// timing.
//
// Random A, B and twiddles (including +-1, +-j and full-scale values) are
// applied just after a rising edge. Before the falling edge the outputs must
// still hold the previous result; after it they must equal A + W*B and
// A - W*B, computed here with 64-bit integers: the complex product rounded
// half up after dropping 16 fraction bits, then the sum wrapped to 18 bits.
`timescale 1ns/1ps
module tb_butterfly_unit;
  import fft_pkg::*;

  logic  clk = 1'b0;
  cplx_t a, b, top, bot;
  twid_t w;
  int    checks = 0, failures = 0;

  butterfly_unit dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
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

  function automatic longint wrap18(input longint v);
    longint m = v & 64'h3FFFF;
    return (m >= 64'sh20000) ? m - 64'sh40000 : m;
  endfunction

  function automatic longint rnd(input int lo, input int hi);
    return longint'($urandom_range(0, hi - lo)) + lo;
  endfunction

  initial begin
    cplx_t prev_top, prev_bot;
    @(posedge clk); #1;
    a = '0; b = '0; w = '{re: 18'sd65536, im: 18'sd0};
    @(negedge clk); #1;
    for (int i = 0; i < 2000; i++) begin
      longint ar, ai, br, bi, wr, wi, pr, pim;
      @(posedge clk); #1;
      prev_top = top; prev_bot = bot;
      ar = rnd(-131072, 131071); ai = rnd(-131072, 131071);
      br = rnd(-131072, 131071); bi = rnd(-131072, 131071);
      case (i % 5)
        0: begin wr = 65536;  wi = 0;      end
        1: begin wr = 0;      wi = -65536; end
        2: begin wr = -65536; wi = 0;      end
        3: begin wr = 46341;  wi = -46341; end
        default: begin wr = rnd(-65536, 65536); wi = rnd(-65536, 65536); end
      endcase
      if (i % 7 == 0) begin ar = rnd(-4000, 4000); ai = rnd(-4000, 4000); br = rnd(-4000, 4000); bi = rnd(-4000, 4000); end
      a = '{re: sample_t'(ar), im: sample_t'(ai)};
      b = '{re: sample_t'(br), im: sample_t'(bi)};
      w = '{re: coef_t'(wr),   im: coef_t'(wi)};
      #3;   // still in the high phase
      check(top == prev_top && bot == prev_bot, "output changed before the falling edge");
      @(negedge clk); #1;
      pr  = wrap18((br * wr - bi * wi + 32768) >>> 16);
      pim = wrap18((br * wi + bi * wr + 32768) >>> 16);
      check(longint'(top.re) == wrap18(ar + pr) && longint'(top.im) == wrap18(ai + pim),
            $sformatf("top (%0d,%0d) expected (%0d,%0d)", top.re, top.im, wrap18(ar + pr), wrap18(ai + pim)));
      check(longint'(bot.re) == wrap18(ar - pr) && longint'(bot.im) == wrap18(ai - pim),
            $sformatf("bot (%0d,%0d) expected (%0d,%0d)", bot.re, bot.im, wrap18(ar - pr), wrap18(ai - pim)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
