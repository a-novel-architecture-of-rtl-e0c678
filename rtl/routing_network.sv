// routing_network -- stage-controlled permutation that feeds the butterflies.
//
// Input d[n], n = 0..N-1, comes from the input selectors: in stage 0 it is
// the external sample x(n), in later stages it is register-array slot n,
// which holds output n of the previous stage in butterfly order (slot 2j is
// the sum output of butterfly j, slot 2j+1 its difference output). Output
// a[j]/b[j] are the two inputs of butterfly j (b[j] is the one multiplied by
// the twiddle).
//   stage 0  : the bit-reversed sequence, a[j] = x(rev(2j)), b[j] = x(rev(2j+1))
//              (for N = 8: (x0,x4), (x2,x6), (x1,x5), (x3,x7)).
//   stage s>0: the in-place decimation-in-time pairing at distance 2**s,
//              positions top(j,s) and top(j,s)+2**s, each taken from the
//              register slot that holds it (fft_pkg::slot_of_pos).
// For N = 8 this gives the pairs f(0)/f(2), f(1)/f(3), f(4)/f(6), f(5)/f(7)
// in stage 1 and f(0)/f(4), f(1)/f(5), f(2)/f(6), f(3)/f(7) in stage 2, where
// f(p) is in-place position p. The network is log2N fixed wirings and an
// N-wide multiplexer selected by the stage bus; it is purely combinational.
// The paper names the stage-0 bit reversal and the stage distances; the
// register-slot mapping follows from its feedback wiring.
module routing_network
  import fft_pkg::*;
#(
  parameter int N   = 8,
  localparam int M   = $clog2(N),
  localparam int SBW = (M > 1) ? $clog2(M) : 1
) (
  input  logic [SBW-1:0] sb,          // stage bus
  input  cplx_t          d [N],       // selected samples
  output cplx_t          a [N/2],     // butterfly j, un-multiplied input
  output cplx_t          b [N/2]      // butterfly j, multiplied input
);

  // perm[s][2j] / perm[s][2j+1]: the a / b input of butterfly j in stage s.
  cplx_t perm [M][N];

  for (genvar j = 0; j < N/2; j++) begin : g_bf
    assign perm[0][2*j]   = d[bitrev(2*j,   M)];
    assign perm[0][2*j+1] = d[bitrev(2*j+1, M)];
    for (genvar s = 1; s < M; s++) begin : g_stage
      localparam int PT = top_pos(j, s);
      assign perm[s][2*j]   = d[slot_of_pos(PT,            s - 1)];
      assign perm[s][2*j+1] = d[slot_of_pos(PT + (1 << s), s - 1)];
    end
  end

  always_comb begin
    for (int j = 0; j < N/2; j++) begin
      a[j] = (int'(sb) < M) ? perm[int'(sb)][2*j]   : perm[0][2*j];
      b[j] = (int'(sb) < M) ? perm[int'(sb)][2*j+1] : perm[0][2*j+1];
    end
  end

endmodule
