// tb_routing_network -- checks the stage-dependent butterfly pairing.
//
// Every input slot carries its own index as data, so the outputs show which
// slot reached which butterfly input. For N = 8 the pairs are compared with
// the data path layout of the 8-point processor (bit-reversed pairs
// x0/x4, x2/x6, x1/x5, x3/x7, then positions f0/f2, f1/f3, f4/f6, f5/f7,
// then f0/f4, f1/f5, f2/f6, f3/f7). For N = 8, 16 and 64 the pairs are also
// compared with a model built here: stage 0 pairs bit-reversed indices
// 2j and 2j+1; stage s pairs in-place positions p and p + 2**s of group
// j / 2**s, each looked up in the slot where stage s-1's butterfly left it.
`timescale 1ns/1ps
module tb_routing_network;
  import fft_pkg::*;
  import fft_ref_pkg::rev;

  int checks = 0, failures = 0;

  logic [1:0] sb8;  cplx_t d8 [8];   cplx_t a8 [4],  b8 [4];
  logic [1:0] sb16; cplx_t d16 [16]; cplx_t a16 [8], b16 [8];
  logic [2:0] sb64; cplx_t d64 [64]; cplx_t a64 [32], b64 [32];

  routing_network #(.N(8))  u8  (.sb(sb8),  .d(d8),  .a(a8),  .b(b8));
  routing_network #(.N(16)) u16 (.sb(sb16), .d(d16), .a(a16), .b(b16));
  routing_network #(.N(64)) u64 (.sb(sb64), .d(d64), .a(a64), .b(b64));

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

  // Expected source slot of input 'side' (0: a, 1: b) of butterfly j.
  function automatic int expect_slot(input int n, input int s, input int j, input int side);
    int bits = $clog2(n);
    int slot_of [] = new[n];
    int h, p;
    if (s == 0) return rev(2 * j + side, bits);
    h = 1 << (s - 1);
    for (int jj = 0; jj < n / 2; jj++) begin
      p = (jj / h) * 2 * h + jj % h;
      slot_of[p]     = 2 * jj;
      slot_of[p + h] = 2 * jj + 1;
    end
    h = 1 << s;
    p = (j / h) * 2 * h + j % h + side * h;
    return slot_of[p];
  endfunction

  // Pairs printed in the 8-point data path layout, per stage and butterfly.
  int fig_a [3][4] = '{'{0, 2, 1, 3}, '{0, 1, 4, 5}, '{0, 1, 2, 3}};
  int fig_b [3][4] = '{'{4, 6, 5, 7}, '{2, 3, 6, 7}, '{4, 5, 6, 7}};

  initial begin
    for (int rep = 0; rep < 4; rep++) begin
      foreach (d8[n])  d8[n]  = '{re: sample_t'(n), im: sample_t'($urandom)};
      foreach (d16[n]) d16[n] = '{re: sample_t'(n), im: sample_t'($urandom)};
      foreach (d64[n]) d64[n] = '{re: sample_t'(n), im: sample_t'($urandom)};
      for (int s = 0; s < 3; s++) begin
        sb8 = 2'(s); #1;
        for (int j = 0; j < 4; j++) begin
          // Stage 0 reads x in natural order; stage 1 reads stage-0 outputs,
          // whose slot equals the in-place position; stage 2 maps positions.
          if (s < 2) begin
            check(int'(a8[j].re) == fig_a[s][j] && int'(b8[j].re) == fig_b[s][j],
                  $sformatf("N=8 stage %0d bf %0d: (%0d,%0d) figure (%0d,%0d)", s, j, a8[j].re, b8[j].re, fig_a[s][j], fig_b[s][j]));
          end
          check(int'(a8[j].re) == expect_slot(8, s, j, 0) && int'(b8[j].re) == expect_slot(8, s, j, 1),
                $sformatf("N=8 stage %0d bf %0d", s, j));
          check(a8[j] == d8[a8[j].re] && b8[j] == d8[b8[j].re], "N=8 data not passed whole");
        end
      end
      for (int s = 0; s < 4; s++) begin
        sb16 = 2'(s); #1;
        for (int j = 0; j < 8; j++)
          check(int'(a16[j].re) == expect_slot(16, s, j, 0) && int'(b16[j].re) == expect_slot(16, s, j, 1),
                $sformatf("N=16 stage %0d bf %0d: (%0d,%0d)", s, j, a16[j].re, b16[j].re));
      end
      for (int s = 0; s < 6; s++) begin
        sb64 = 3'(s); #1;
        for (int j = 0; j < 32; j++)
          check(int'(a64[j].re) == expect_slot(64, s, j, 0) && int'(b64[j].re) == expect_slot(64, s, j, 1) &&
                a64[j] == d64[a64[j].re] && b64[j] == d64[b64[j].re],
                $sformatf("N=64 stage %0d bf %0d", s, j));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
