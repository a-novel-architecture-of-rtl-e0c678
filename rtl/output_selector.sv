// output_selector -- the column of output demultiplexers behind the
// butterflies.
//
// Each butterfly output goes either back to the register array (output
// select line osl = 0, all stages but the last) or to the output port
// (osl = 1, the last stage). The side not selected is driven with zero.
//   fb[2j] = top[j], fb[2j+1] = bot[j]                       when osl = 0
//   y[j]   = top[j], y[j + N/2] = bot[j]                     when osl = 1
// In the last stage butterfly j combines in-place positions j and j + N/2,
// so its sum output is frequency bin j and its difference output bin
// j + N/2; y is therefore Y(0..N-1) in natural order. The paper's drawings
// label the two outputs of butterfly j as Y(2j) and Y(2j+1); this design
// follows the paper's definition of Y(k) as the k-th DFT bin instead, which
// the drawn in-place pairing yields only with this wiring. Purely
// combinational.
module output_selector
  import fft_pkg::*;
#(
  parameter int N = 8
) (
  input  logic  osl,          // 1: results to the output port
  input  cplx_t top [N/2],    // butterfly sum outputs
  input  cplx_t bot [N/2],    // butterfly difference outputs
  output cplx_t fb  [N],      // to the register array, butterfly order
  output cplx_t y   [N]       // Y(0..N-1), natural order
);

  always_comb begin
    for (int j = 0; j < N/2; j++) begin
      fb[2*j]     = osl ? '0 : top[j];
      fb[2*j+1]   = osl ? '0 : bot[j];
      y[j]        = osl ? top[j] : '0;
      y[j + N/2]  = osl ? bot[j] : '0;
    end
  end

endmodule
