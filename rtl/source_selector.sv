// source_selector -- the column of N two-input multiplexers in front of the
// routing network.
//
// Multiplexer n passes the external sample x[n] when the input select line
// isl is 0 (stage 0 of a frame) and register-array slot fb[n] when isl is 1
// (every later stage), as in the paper's block diagram, where each input
// multiplexer has the external sample on its 0 input and the register array
// on its 1 input. Purely combinational.
module source_selector
  import fft_pkg::*;
#(
  parameter int N = 8
) (
  input  logic  isl,        // 0: external input, 1: feedback
  input  cplx_t x  [N],     // external samples x(0..N-1)
  input  cplx_t fb [N],     // register array contents
  output cplx_t d  [N]      // to the routing network
);

  always_comb begin
    for (int n = 0; n < N; n++) d[n] = isl ? fb[n] : x[n];
  end

endmodule
